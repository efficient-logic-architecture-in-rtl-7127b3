// pointer_memory_tb: runs the pointer-table initialisation twice with
// subsampling and checks the kept samples against a software copy of the
// LFSR rule (keep when the low byte is below SUBSAMPLE_Q8), the count, the
// initialisation time (init_done num_samples + 2 cycles after init) and then the
// write / read of both banks as the data split uses them.
`timescale 1ns/1ps
module pointer_memory_tb;
  localparam int N = 40, AW = $clog2(N + 1), SUB = 128;
  localparam logic [15:0] SEED = 16'h1234;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  logic init = 0, init_done, wr_en = 0, wr_bank = 0, rd_en = 0, rd_bank = 0;
  logic [AW-1:0] num_samples = AW'(N - 3), init_count, wr_addr = '0, wr_data = '0, rd_addr = '0, rd_data;
  int checks = 0, failures = 0;
  logic [15:0] lfsr = SEED;

  pointer_memory #(.N_SAMPLES(N), .SUBSAMPLE_Q8(SUB), .LFSR_SEED(SEED)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #1 rst_n = 0;
    #20 rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      int kept [$];
      int t;
      kept.delete();
      for (int i = 0; i < N - 3; i++) begin
        if (lfsr[7:0] < SUB) kept.push_back(i);
        lfsr = {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
      end
      @(negedge clk) init = 1;
      @(negedge clk) init = 0;
      t = 1;
      while (!init_done) begin @(negedge clk); t++; end
      check(t == N - 3 + 2, $sformatf("init took %0d cycles", t));
      check(int'(init_count) == kept.size(), $sformatf("count %0d vs %0d", init_count, kept.size()));
      check(kept.size() > 0 && kept.size() < N - 3, "subsampling kept some but not all");
      for (int k = 0; k < kept.size(); k++) begin
        rd_en = 1; rd_bank = 0; rd_addr = AW'(k);
        @(negedge clk);
        check(int'(rd_data) == kept[k], $sformatf("bank0[%0d] = %0d vs %0d", k, rd_data, kept[k]));
      end
      rd_en = 0;
    end
    // data split style writes to bank 1, then read back
    for (int k = 0; k < N; k++) begin
      @(negedge clk);
      wr_en = 1; wr_bank = 1; wr_addr = AW'(k); wr_data = AW'(N - 1 - k);
    end
    @(negedge clk) wr_en = 0;
    for (int k = 0; k < N; k++) begin
      rd_en = 1; rd_bank = 1; rd_addr = AW'(k);
      @(negedge clk);
      check(int'(rd_data) == N - 1 - k, "bank1 readback");
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
