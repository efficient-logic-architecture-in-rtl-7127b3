// state_memory_tb: writes random sample states to a small state memory,
// overwrites some of them, and checks every read (one-cycle latency).
`timescale 1ns/1ps
module state_memory_tb;
  import gbdt_pkg::*;
  localparam int N = 24, AW = $clog2(N + 1);
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  state_t wr_state = '0, rd_state;
  state_t ref_mem [N];
  int checks = 0, failures = 0;

  state_memory #(.N_SAMPLES(N)) dut (.*);

  initial begin
    for (int pass = 0; pass < 2; pass++)
      for (int i = 0; i < N; i++)
        if (pass == 0 || i % 3 == 0) begin
          ref_mem[i] = {$urandom, $urandom};
          @(negedge clk);
          wr_en = 1; wr_addr = AW'(i); wr_state = ref_mem[i];
        end
    @(negedge clk) wr_en = 0;
    for (int k = 0; k < 3 * N; k++) begin
      int a;
      a = $urandom_range(0, N - 1);
      @(negedge clk) begin rd_en = 1; rd_addr = AW'(a); end
      @(negedge clk) begin
        rd_en = 0;
        checks++;
        if (rd_state !== ref_mem[a]) begin
          failures++;
          $display("FAIL addr %0d", a);
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
