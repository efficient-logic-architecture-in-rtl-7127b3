// control_tb: runs the control unit against behavioural engines and a
// behavioural split-gain unit that answer every command after a random
// delay. The sequence of commands (with depth, node, pointer bank and each
// engine's address range) is recorded and compared with the sequence the
// dataflow prescribes: score reset, then per tree initialisation, node
// training, split gain, data split for non-leaf nodes (children's ranges
// from the engines' mid addresses) and the gradient update; train_done after
// the last tree. The root of the second tree is made a leaf, so its children
// must be skipped.
`timescale 1ns/1ps
module control_tb;
  localparam int E = 2, N = 16, D = 1, T = 3;
  localparam int AW = $clog2(N + 1), DW = $clog2(D + 1), NW = 1, TW = $clog2(T + 1);
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  logic train_start = 0, busy, train_done;
  logic [TW-1:0] tree_idx;
  logic init, hist_start, split_start, update_start, init_scores, bank, sg_start;
  logic [E-1:0][AW-1:0] start_addr, end_addr, init_count, mid_addr;
  logic [DW-1:0] depth;
  logic [NW-1:0] node_idx;
  logic [E-1:0] init_done, hist_done, cls_done;
  logic sg_done, sg_leaf;
  int checks = 0, failures = 0, n_done = 0;
  string got [$];
  string want [$];
  int cnt [E] = '{11, 7};
  int mid [E] = '{4, 0};

  control #(.N_ENGINES(E), .N_SAMPLES(N), .MAX_DEPTH(D), .N_TREES(T)) dut (.*);

  // behavioural engines: answer after a random delay
  for (genvar e = 0; e < E; e++) begin : g_eng
    initial begin
      init_done[e] = 0; hist_done[e] = 0; cls_done[e] = 0;
      init_count[e] = '0; mid_addr[e] = '0;
      forever begin
        @(posedge clk);
        if (init || hist_start || split_start || update_start) begin
          bit is_init, is_hist;
          is_init = init; is_hist = hist_start;
          repeat ($urandom_range(1, 6)) @(posedge clk);
          if (is_init) begin init_count[e] <= AW'(cnt[e]); init_done[e] <= 1; end
          else if (is_hist) hist_done[e] <= 1;
          else begin mid_addr[e] <= AW'(mid[e]); cls_done[e] <= 1; end
          @(posedge clk);
          init_done[e] <= 0; hist_done[e] <= 0; cls_done[e] <= 0;
        end
      end
    end
  end
  // behavioural split gain: roots of trees 0 and 2 split, everything else leaf
  initial begin
    sg_done = 0; sg_leaf = 0;
    forever begin
      @(posedge clk);
      if (sg_start) begin
        bit leaf;
        leaf = (depth != 0) || (tree_idx == 1);
        repeat ($urandom_range(2, 9)) @(posedge clk);
        sg_done <= 1; sg_leaf <= leaf;
        @(posedge clk) sg_done <= 0;
      end
    end
  end
  // command recorder
  always @(posedge clk) if (rst_n) begin
    if (init) got.push_back("init");
    if (update_start) got.push_back($sformatf("update %0d", init_scores));
    if (hist_start) got.push_back($sformatf("hist d%0d n%0d b%0d [%0d,%0d) [%0d,%0d)", depth, node_idx, bank,
                                            start_addr[0], end_addr[0], start_addr[1], end_addr[1]));
    if (sg_start) got.push_back($sformatf("gain d%0d n%0d", depth, node_idx));
    if (split_start) got.push_back($sformatf("split d%0d n%0d b%0d [%0d,%0d) [%0d,%0d)", depth, node_idx, bank,
                                             start_addr[0], end_addr[0], start_addr[1], end_addr[1]));
    if (train_done) n_done++;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    want.push_back("update 1");
    for (int t = 0; t < T; t++) begin
      want.push_back("init");
      want.push_back($sformatf("hist d0 n0 b0 [0,%0d) [0,%0d)", cnt[0], cnt[1]));
      want.push_back("gain d0 n0");
      if (t != 1) begin
        want.push_back($sformatf("split d0 n0 b0 [0,%0d) [0,%0d)", cnt[0], cnt[1]));
        want.push_back($sformatf("hist d1 n0 b1 [0,%0d) [0,%0d)", mid[0], mid[1]));
        want.push_back("gain d1 n0");
        want.push_back($sformatf("hist d1 n1 b1 [%0d,%0d) [%0d,%0d)", mid[0], cnt[0], mid[1], cnt[1]));
        want.push_back("gain d1 n1");
      end
      want.push_back("update 0");
    end
    #1 rst_n = 0;
    #20 rst_n = 1;
    @(negedge clk) train_start = 1;
    @(negedge clk) train_start = 0;
    check(busy, "busy after start");
    while (!train_done) @(negedge clk);
    repeat (20) @(negedge clk);
    check(!busy, "idle after training");
    check(n_done == 1, "one train_done");
    check(int'(tree_idx) == T, "tree count");
    check(got.size() == want.size(), $sformatf("%0d commands, expected %0d", got.size(), want.size()));
    for (int k = 0; k < want.size() && k < got.size(); k++)
      check(got[k] == want[k], $sformatf("command %0d: '%s' expected '%s'", k, got[k], want[k]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
