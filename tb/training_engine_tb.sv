// training_engine_tb: one engine taken through a tree by hand, the way the
// control and split-gain units drive it: load samples, init (the root range
// must hold the samples kept by the subsampling LFSR), build the root
// histograms (every bin read back and compared with a software histogram),
// write a root split and two leaves into the model memory, split the root
// (mid address and the children's histograms), and run the gradient update
// (every sample's score, g and h against an independent computation).
`timescale 1ns/1ps
module training_engine_tb;
  import gbdt_pkg::*;
  localparam int N = 16, F = 3, D = 1, AW = $clog2(N + 1), DW = 1, NW = 1;
  localparam logic [15:0] SEED = 16'h2468;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  logic load_en = 0, load_label = 0;
  logic [AW-1:0] load_addr = '0, num_samples = AW'(N);
  feat_t [F-1:0] load_row = '0;
  logic init = 0, init_done, hist_start = 0, split_start = 0, update_start = 0, init_scores = 0, bank = 0;
  logic [AW-1:0] init_count, start_addr = '0, end_addr = '0, mid_addr;
  logic [DW-1:0] depth = '0;
  logic [NW-1:0] node_idx = '0;
  logic hist_done, cls_done;
  sum_t node_g, node_h;
  logic sg_rd_en = 0;
  feat_t sg_rd_bin = '0;
  sum_t [F-1:0] sg_g, sg_h;
  logic mm_wr_en = 0;
  logic [DW-1:0] mm_wr_depth = '0;
  logic [NW-1:0] mm_wr_idx = '0;
  node_t mm_wr_node = '0;
  int checks = 0, failures = 0;

  feat_t [F-1:0] rows [N];
  logic labels [N];
  bit   kept [N];

  training_engine #(.N_SAMPLES(N), .N_FEATURES(F), .MAX_DEPTH(D), .SUBSAMPLE_Q8(128), .LFSR_SEED(SEED)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic pulse(ref logic s);
    @(negedge clk) s = 1;
    @(negedge clk) s = 0;
  endtask

  function automatic longint sig(longint s);
    longint x, y;
    x = (s < 0) ? -s : s;
    if (x >= 20480) y = 4096;
    else if (x >= 9728) y = x / 32 + 3456;
    else if (x >= 4096) y = x / 8 + 2560;
    else y = x / 4 + 2048;
    return (s < 0) ? 4096 - y : y;
  endfunction

  // compare histograms of a set of samples (initial state: g = 0.5 - y, h = 0.25)
  task automatic check_hist(bit member [N]);
    for (int x = 0; x < N_BINS; x++) begin
      sg_rd_en = 1; sg_rd_bin = feat_t'(x);
      @(negedge clk);
      sg_rd_en = 0;
      for (int f = 0; f < F; f++) begin
        longint eg, eh;
        eg = 0; eh = 0;
        for (int s = 0; s < N; s++)
          if (member[s] && rows[s][f] == feat_t'(x)) begin eg += labels[s] ? -2048 : 2048; eh += 1024; end
        check(longint'(sg_g[f]) == eg && longint'(sg_h[f]) == eh, $sformatf("bin %0d feature %0d", x, f));
      end
    end
  endtask

  node_t root;
  score_t wl, wr;
  initial begin
    logic [15:0] lfsr;
    int nk, nl;
    bit m [N];
    #1 rst_n = 0;
    #20 rst_n = 1;
    for (int i = 0; i < N; i++) begin
      for (int f = 0; f < F; f++) rows[i][f] = ($urandom_range(0, 5) == 0) ? 8'd255 : 8'($urandom_range(0, 9));
      labels[i] = 1'($urandom);
      @(negedge clk);
      load_en = 1; load_addr = AW'(i); load_row = rows[i]; load_label = labels[i];
    end
    @(negedge clk) load_en = 0;
    // init
    lfsr = SEED; nk = 0;
    for (int i = 0; i < N; i++) begin
      kept[i] = lfsr[7:0] < 128;
      if (kept[i]) nk++;
      lfsr = {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
    end
    pulse(init);
    while (!init_done) @(negedge clk);
    check(int'(init_count) == nk, $sformatf("root holds %0d samples, expected %0d", init_count, nk));
    // root histograms
    start_addr = '0; end_addr = init_count; bank = 0; depth = '0; node_idx = '0;
    pulse(hist_start);
    while (!hist_done) @(negedge clk);
    check_hist(kept);
    // model: root split on feature 1, missing left; two leaves
    root = '{leaf: 0, missing_left: 1, feature: 8'd1, threshold: 8'd4, weight: '0};
    wl = -24'sd1500; wr = 24'sd2200;
    @(negedge clk) begin mm_wr_en = 1; mm_wr_depth = 0; mm_wr_idx = 0; mm_wr_node = root; end
    @(negedge clk) begin mm_wr_depth = 1; mm_wr_idx = 0; mm_wr_node = '{leaf: 1, missing_left: 0, feature: 0, threshold: 0, weight: wl}; end
    @(negedge clk) begin mm_wr_depth = 1; mm_wr_idx = 1; mm_wr_node = '{leaf: 1, missing_left: 0, feature: 0, threshold: 0, weight: wr}; end
    @(negedge clk) mm_wr_en = 0;
    // split of the root
    pulse(split_start);
    while (!cls_done) @(negedge clk);
    nl = 0;
    for (int s = 0; s < N; s++) if (kept[s] && (rows[s][1] == 255 || rows[s][1] <= 4)) nl++;
    check(int'(mid_addr) == nl, $sformatf("mid %0d, expected %0d", mid_addr, nl));
    // left child histograms from bank 1
    for (int s = 0; s < N; s++) m[s] = kept[s] && (rows[s][1] == 255 || rows[s][1] <= 4);
    start_addr = '0; end_addr = mid_addr; bank = 1;
    pulse(hist_start);
    while (!hist_done) @(negedge clk);
    check_hist(m);
    // gradient update of all samples
    pulse(update_start);
    while (!cls_done) @(negedge clk);
    @(negedge clk);
    for (int s = 0; s < N; s++) begin
      longint sc, p;
      state_t got;
      sc = (rows[s][1] == 255 || rows[s][1] <= 4) ? wl : wr;
      p = sig(sc);
      got = dut.u_dm.u_state.mem[s];
      check(longint'(got.score) == sc && longint'(got.g) == p - (labels[s] ? 4096 : 0) &&
            longint'(got.h) == (p * (4096 - p)) / 4096 && got.label == labels[s],
            $sformatf("state of sample %0d", s));
    end
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
