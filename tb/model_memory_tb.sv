// model_memory_tb: initialises a depth-2 model memory (check: every node a
// leaf of weight 0, init_done 2^MAX_DEPTH + 1 cycles after init), writes random nodes
// into every depth and reads them back through the per-depth ports with one
// cycle of latency, then initialises again.
`timescale 1ns/1ps
module model_memory_tb;
  import gbdt_pkg::*;
  localparam int D = 2, DW = $clog2(D + 1), NW = D;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  logic init = 0, init_done, wr_en = 0;
  logic [DW-1:0] wr_depth = '0;
  logic [NW-1:0] wr_idx = '0;
  node_t wr_node = '0;
  logic [NW-1:0] rd_idx [D+1];
  node_t rd_node [D+1];
  node_t ref_node [D+1][1 << D];
  int checks = 0, failures = 0;

  model_memory #(.MAX_DEPTH(D)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic do_init();
    int t;
    @(negedge clk) init = 1;
    @(negedge clk) init = 0;
    t = 1;
    while (!init_done) begin @(negedge clk); t++; end
    check(t == (1 << D) + 1, $sformatf("init took %0d cycles", t));
    for (int d = 0; d <= D; d++)
      for (int n = 0; n < (1 << d); n++) begin
        ref_node[d][n] = '0;
        ref_node[d][n].leaf = 1'b1;
      end
  endtask

  task automatic read_all();
    for (int n = 0; n < (1 << D); n++) begin
      for (int d = 0; d <= D; d++) rd_idx[d] = NW'(n % (1 << d));
      @(negedge clk);
      for (int d = 0; d <= D; d++)
        check(rd_node[d] == ref_node[d][n % (1 << d)], $sformatf("depth %0d node %0d", d, n));
    end
  endtask

  initial begin
    for (int d = 0; d <= D; d++) rd_idx[d] = '0;
    #1 rst_n = 0;
    #20 rst_n = 1;
    do_init();
    read_all();
    for (int d = 0; d <= D; d++)
      for (int n = 0; n < (1 << d); n++) begin
        node_t x;
        x = node_t'({$urandom, $urandom});
        ref_node[d][n] = x;
        @(negedge clk);
        wr_en = 1; wr_depth = DW'(d); wr_idx = NW'(n); wr_node = x;
      end
    @(negedge clk) wr_en = 0;
    read_all();
    do_init();
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
