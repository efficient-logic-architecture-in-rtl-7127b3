// split_gain_tb: feeds the split-gain unit with the histograms of two
// engines built from random samples (held in behavioural histogram memories
// that answer one cycle after a read) and compares the node it writes with a
// software evaluation of every feature, threshold and missing-value
// direction (xgboost gain, lambda, gamma, learning rate). Cases: random
// nodes, a node at the maximum depth (forced leaf), a node whose samples all
// share one value (no valid split, leaf), and an empty node (weight 0). It
// also checks that the histograms are read once per bin and the result time.
`timescale 1ns/1ps
module split_gain_tb;
  import gbdt_pkg::*;
  localparam int E = 2, F = 3, D = 2, LQ = 4096, GQ = 0, EQ = 1229;
  localparam int DW = $clog2(D + 1), NW = D;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  logic start = 0, hist_rd_en, node_wr, done;
  logic [DW-1:0] depth = '0, node_depth;
  logic [NW-1:0] node_idx = '0, node_widx;
  feat_t hist_rd_bin;
  sum_t [E-1:0][F-1:0] hist_g, hist_h;
  sum_t [E-1:0] node_g, node_h;
  node_t node;
  int checks = 0, failures = 0, reads = 0;

  longint hg [E][F][N_BINS];
  longint hh [E][F][N_BINS];

  split_gain #(.N_ENGINES(E), .N_FEATURES(F), .MAX_DEPTH(D), .LAMBDA_Q(LQ), .GAMMA_Q(GQ), .ETA_Q(EQ)) dut (.*);

  always_ff @(posedge clk)
    if (hist_rd_en) begin
      reads <= reads + 1;
      for (int e = 0; e < E; e++)
        for (int f = 0; f < F; f++) begin
          hist_g[e][f] <= sum_t'(hg[e][f][hist_rd_bin]);
          hist_h[e][f] <= sum_t'(hh[e][f][hist_rd_bin]);
        end
    end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic longint term_ref(longint g, longint h);
    return (h + LQ > 0) ? (g * g) / (h + LQ) : 0;
  endfunction

  // samples: mode 0 random, 1 all in one bin, 2 none
  task automatic make(int mode, int m);
    for (int e = 0; e < E; e++) begin
      node_g[e] = '0; node_h[e] = '0;
      for (int f = 0; f < F; f++) for (int x = 0; x < N_BINS; x++) begin hg[e][f][x] = 0; hh[e][f][x] = 0; end
      if (mode != 2)
        for (int i = 0; i < m; i++) begin
          longint g, h;
          int lab;
          lab = $urandom_range(0, 1);
          h = $urandom_range(200, 1024);
          g = lab ? -$urandom_range(0, 3000) : $urandom_range(0, 3000);
          node_g[e] += sum_t'(g); node_h[e] += sum_t'(h);
          for (int f = 0; f < F; f++) begin
            int b;
            if (mode == 1) b = 7;
            else if ($urandom_range(0, 9) == 0) b = 255;
            else b = lab ? $urandom_range(0, 12) + 4 * f : $urandom_range(3, 20);
            hg[e][f][b] += g; hh[e][f][b] += h;
          end
        end
    end
  endtask

  task automatic run(int d, int n);
    longint G, H, pt, best, w;
    bit found, bml;
    int bf, bt, t;
    node_t exp_n;
    G = 0; H = 0;
    for (int e = 0; e < E; e++) begin G += node_g[e]; H += node_h[e]; end
    pt = term_ref(G, H);
    found = 0; best = 0; bf = 0; bt = 0; bml = 0;
    for (int f = 0; f < F; f++) begin
      longint gl, hl, gm, hm, fb;
      bit fok, fml;
      int ft;
      gl = 0; hl = 0; gm = 0; hm = 0; fok = 0; fb = 0; fml = 0; ft = 0;
      for (int e = 0; e < E; e++) begin gm += hg[e][f][255]; hm += hh[e][f][255]; end
      for (int x = 0; x < 255; x++) begin
        for (int e = 0; e < E; e++) begin gl += hg[e][f][x]; hl += hh[e][f][x]; end
        for (int m = 0; m < 2; m++) begin
          longint lg, lh, gain;
          lg = gl + (m ? gm : 0); lh = hl + (m ? hm : 0);
          gain = term_ref(lg, lh) + term_ref(G - lg, H - lh) - pt;
          if (lh > 0 && H - lh > 0 && (!fok || gain > fb)) begin fok = 1; fb = gain; ft = x; fml = m[0]; end
        end
      end
      if (fok && (!found || fb > best)) begin found = 1; best = fb; bf = f; bt = ft; bml = fml; end
    end
    exp_n = '0;
    if (d >= D || !found || best <= 2 * GQ) begin
      w = -((G <<< 12) / (H + LQ));
      w = (w * EQ) >>> 12;
      exp_n.leaf = 1; exp_n.weight = score_t'(w);
    end else begin
      exp_n.feature = 8'(bf); exp_n.threshold = feat_t'(bt); exp_n.missing_left = bml;
    end
    reads = 0;
    @(negedge clk);
    start = 1; depth = DW'(d); node_idx = NW'(n);
    @(negedge clk) start = 0;
    t = 1;
    while (!node_wr) begin @(negedge clk); t++; end
    check(done, "done with the write");
    check(t == N_BINS + 6, $sformatf("result after %0d cycles", t));
    check(reads == N_BINS, $sformatf("%0d histogram reads", reads));
    check(int'(node_depth) == d && int'(node_widx) == n, "node address");
    check(node == exp_n, $sformatf("node leaf%0d f%0d t%0d ml%0d w%0d, expected leaf%0d f%0d t%0d ml%0d w%0d",
          node.leaf, node.feature, node.threshold, node.missing_left, node.weight,
          exp_n.leaf, exp_n.feature, exp_n.threshold, exp_n.missing_left, exp_n.weight));
  endtask

  int n_split = 0;
  initial begin
    #1 rst_n = 0;
    #20 rst_n = 1;
    for (int k = 0; k < 6; k++) begin
      make(0, 20 + 5 * k);
      run(k % 2, k % 2);
      if (!node.leaf) n_split++;
    end
    check(n_split > 0, "some random node was split");
    make(0, 30); run(D, 3);
    check(node.leaf, "max depth gives a leaf");
    make(1, 25); run(0, 0);
    check(node.leaf, "one-value node gives a leaf");
    make(2, 0); run(1, 1);
    check(node.leaf && node.weight == 0, "empty node: leaf of weight 0");
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
