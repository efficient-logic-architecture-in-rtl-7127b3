// feature_memory_tb: writes a random row to every address of a small feature
// memory, reads them back in random order and checks data and the one-cycle
// read latency.
`timescale 1ns/1ps
module feature_memory_tb;
  import gbdt_pkg::*;
  localparam int N = 20, F = 4, AW = $clog2(N + 1);
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  feat_t [F-1:0] wr_row = '0, rd_row;
  feat_t [F-1:0] ref_mem [N];
  int checks = 0, failures = 0;

  feature_memory #(.N_SAMPLES(N), .N_FEATURES(F)) dut (.*);

  initial begin
    for (int i = 0; i < N; i++) begin
      for (int f = 0; f < F; f++) ref_mem[i][f] = 8'($urandom);
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(i); wr_row = ref_mem[i];
    end
    @(negedge clk) wr_en = 0;
    for (int k = 0; k < 3 * N; k++) begin
      int a;
      a = $urandom_range(0, N - 1);
      @(negedge clk) begin rd_en = 1; rd_addr = AW'(a); end
      @(negedge clk) begin
        rd_en = 0;
        checks++;
        if (rd_row !== ref_mem[a]) begin
          failures++;
          $display("FAIL addr %0d: %h vs %h", a, rd_row, ref_mem[a]);
        end
      end
    end
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
