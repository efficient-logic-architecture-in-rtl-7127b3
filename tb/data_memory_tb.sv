// data_memory_tb: loads samples into a small data memory and checks the
// initial state written with each label (score 0, g = 0.5 - y, h = 0.25),
// runs the pointer initialisation, and then checks indirect reads (through
// the pointer table) and direct reads, issued back to back, for the right
// sample, features and state with exactly two cycles of latency. A state
// written through the update port is read back.
`timescale 1ns/1ps
module data_memory_tb;
  import gbdt_pkg::*;
  localparam int N = 24, F = 3, AW = $clog2(N + 1);
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  logic load_en = 0, load_label = 0, init = 0, init_done;
  logic [AW-1:0] load_addr = '0, num_samples = AW'(N), init_count;
  feat_t [F-1:0] load_row = '0;
  logic rd_en = 0, rd_indirect = 0, rd_bank = 0, rd_valid;
  logic [AW-1:0] rd_addr = '0, rd_sample;
  feat_t [F-1:0] rd_row;
  state_t rd_state;
  logic ptr_wr_en = 0, ptr_wr_bank = 0, st_wr_en = 0;
  logic [AW-1:0] ptr_wr_addr = '0, ptr_wr_data = '0, st_wr_addr = '0;
  state_t st_wr_state = '0;
  feat_t [F-1:0] rows [N];
  logic labels [N];
  int exp_sample [$];
  int checks = 0, failures = 0;

  data_memory #(.N_SAMPLES(N), .N_FEATURES(F), .SUBSAMPLE_Q8(128)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // response checker: expected sample index queue, two cycles after request
  logic [1:0] pend;
  always @(posedge clk) begin
    if (rd_valid) begin
      int s;
      s = exp_sample.pop_front();
      check(int'(rd_sample) == s, $sformatf("sample %0d vs %0d", rd_sample, s));
      check(rd_row == rows[s], "row");
      check(rd_state.label == labels[s] && rd_state.score == '0 &&
            rd_state.g == (labels[s] ? -16'sd2048 : 16'sd2048) && rd_state.h == 16'sd1024,
            $sformatf("initial state of %0d", s));
    end
  end
  // latency: rd_valid exactly two cycles after rd_en
  always @(posedge clk) pend <= {pend[0], rd_en};
  always @(posedge clk) if (rst_n) check(rd_valid == pend[1], "two-cycle latency");

  initial begin
    int ptr [$];
    pend = 0;
    #1 rst_n = 0;
    #20 rst_n = 1;
    for (int i = 0; i < N; i++) begin
      for (int f = 0; f < F; f++) rows[i][f] = 8'($urandom);
      labels[i] = 1'($urandom);
      @(negedge clk);
      load_en = 1; load_addr = AW'(i); load_row = rows[i]; load_label = labels[i];
    end
    @(negedge clk) load_en = 0;
    @(negedge clk) init = 1;
    @(negedge clk) init = 0;
    while (!init_done) @(negedge clk);
    // read the pointer table directly from the memory for the expectation
    for (int k = 0; k < int'(init_count); k++) ptr.push_back(int'(dut.u_ptr.mem[0][k]));
    check(init_count > 0, "some samples kept");
    // indirect reads, back to back
    for (int k = 0; k < int'(init_count); k++) begin
      rd_en = 1; rd_indirect = 1; rd_bank = 0; rd_addr = AW'(k);
      exp_sample.push_back(ptr[k]);
      @(negedge clk);
    end
    // direct reads, back to back
    for (int k = N - 1; k >= 0; k--) begin
      rd_en = 1; rd_indirect = 0; rd_addr = AW'(k);
      exp_sample.push_back(k);
      @(negedge clk);
    end
    rd_en = 0;
    repeat (4) @(negedge clk);
    check(exp_sample.size() == 0, "all answers received");
    // state write port
    st_wr_en = 1; st_wr_addr = AW'(5); st_wr_state = state_t'({$urandom, $urandom});
    @(negedge clk) st_wr_en = 0;
    check(dut.u_state.mem[5] == st_wr_state, "state write");
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
