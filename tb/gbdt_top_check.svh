// gbdt_top_check.svh: end-to-end checking shared by the gbdt_top testbenches.
//
// Included inside a testbench module that declares the localparams E, S, F,
// D, T, SUBQ, LQ, GQ, EQ, NRUNS, ALL_MECH (engines, samples per engine, features,
// maximum depth, trees, subsample, lambda, gamma, learning rate, training
// runs, whether every mechanism must occur), the clock `clk`, the reset `rst_n`, the DUT's ports and the DUT
// instance `dut`.
//
// The testbench generates a data set, loads it, and trains NRUNS times in a
// row. In parallel a reference model written here from the algorithm
// (subsampling LFSR, gradient histograms, xgboost gain with fixed-point
// division, leaf weights, piecewise-linear sigmoid) trains the same trees in
// software. Every node the DUT reports on model_* is compared with the
// reference node, and the final score, gradient and hessian of every sample
// are compared with the reference state. It also counts how often each
// mechanism of the design occurred and fails if one never did.

  localparam int AWT = $clog2(S + 1);

  int checks = 0, failures = 0;
  longint cycles = 0;

  // data set
  logic [7:0] feat  [E][S][F];
  logic       label [E][S];
  // reference state
  longint     r_score [E][S];
  longint     r_g     [E][S];
  longint     r_h     [E][S];
  logic [15:0] r_lfsr [E];
  int         nodeof  [E][S];
  // reference nodes in training order
  typedef struct {
    int run, tree, depth, idx;
    bit leaf, ml;
    int feature, thr;
    longint weight;
  } rnode_t;
  rnode_t rq [$];
  rnode_t dq [$];
  int     tree_nodes [int];

  // mechanism counters
  int n_split = 0, n_leaf_max = 0, n_leaf_early = 0, n_ml = 0, n_mr = 0;
  int n_dropped = 0, n_missing_routed = 0, n_runs_done = 0;

  // ---- reference arithmetic -------------------------------------------
  function automatic longint sig_ref(longint s);
    longint x, y;
    x = (s < 0) ? -s : s;
    if (x >= 5 * 4096)      y = 4096;
    else if (x >= 9728)     y = (x >>> 5) + 3456;
    else if (x >= 4096)     y = (x >>> 3) + 2560;
    else                    y = (x >>> 2) + 2048;
    return (s < 0) ? 4096 - y : y;
  endfunction

  function automatic longint term_ref(longint g, longint h);
    longint den;
    den = h + LQ;
    return (den > 0) ? (g * g) / den : 0;
  endfunction

  function automatic longint clamp24(longint v);
    if (v > 8388607) return 8388607;
    if (v < -8388608) return -8388608;
    return v;
  endfunction

  task automatic ref_set_grad(int e, int i);
    longint p;
    p = sig_ref(r_score[e][i]);
    r_g[e][i] = p - (label[e][i] ? 4096 : 0);
    r_h[e][i] = (p * (4096 - p)) >>> 12;
  endtask

  task automatic ref_train_run(int run);
    int valid_lvl [];
    valid_lvl = new[1 << D];
    for (int e = 0; e < E; e++)
      for (int i = 0; i < S; i++) begin
        r_score[e][i] = 0;
        ref_set_grad(e, i);
      end
    for (int t = 0; t < T; t++) begin
      rnode_t tree [int];
      // subsampling, continuing each engine's LFSR
      for (int e = 0; e < E; e++)
        for (int i = 0; i < S; i++) begin
          nodeof[e][i] = (int'(r_lfsr[e][7:0]) < SUBQ || SUBQ >= 256) ? 0 : -1;
          r_lfsr[e] = {r_lfsr[e][14:0], r_lfsr[e][15] ^ r_lfsr[e][13] ^ r_lfsr[e][12] ^ r_lfsr[e][10]};
        end
      foreach (valid_lvl[n]) valid_lvl[n] = (n == 0);
      for (int d = 0; d <= D; d++) begin
        int next_valid [];
        next_valid = new[1 << D];
        foreach (next_valid[n]) next_valid[n] = 0;
        for (int n = 0; n < (1 << d); n++) begin
          longint G, H, pt, best;
          longint hg [F][256];
          longint hh [F][256];
          bit found;
          int bf, bt;
          bit bml;
          rnode_t rn;
          if (!valid_lvl[n]) continue;
          G = 0; H = 0;
          for (int f = 0; f < F; f++) for (int b = 0; b < 256; b++) begin hg[f][b] = 0; hh[f][b] = 0; end
          for (int e = 0; e < E; e++)
            for (int i = 0; i < S; i++)
              if (nodeof[e][i] == d * 1024 + n) begin
                G += r_g[e][i]; H += r_h[e][i];
                for (int f = 0; f < F; f++) begin
                  hg[f][feat[e][i][f]] += r_g[e][i];
                  hh[f][feat[e][i][f]] += r_h[e][i];
                end
              end
          pt = term_ref(G, H);
          found = 0; bf = 0; bt = 0; bml = 0; best = 0;
          for (int f = 0; f < F; f++) begin
            longint gl, hl, fbest;
            bit fok, fml;
            int fthr;
            gl = 0; hl = 0; fok = 0; fbest = 0; fml = 0; fthr = 0;
            for (int t2 = 0; t2 < 255; t2++) begin
              gl += hg[f][t2]; hl += hh[f][t2];
              for (int m = 0; m < 2; m++) begin
                longint lg, lh, gain;
                lg = gl + (m ? hg[f][255] : 0);
                lh = hl + (m ? hh[f][255] : 0);
                gain = term_ref(lg, lh) + term_ref(G - lg, H - lh) - pt;
                if (lh > 0 && H - lh > 0 && (!fok || gain > fbest)) begin
                  fok = 1; fbest = gain; fthr = t2; fml = m[0];
                end
              end
            end
            if (fok && (!found || fbest > best)) begin
              found = 1; best = fbest; bf = f; bt = fthr; bml = fml;
            end
          end
          rn.run = run; rn.tree = t; rn.depth = d; rn.idx = n;
          if (d >= D || !found || best <= 2 * GQ) begin
            longint w;
            w = (H + LQ > 0) ? -((G <<< 12) / (H + LQ)) : 0;
            w = (w * EQ) >>> 12;
            rn.leaf = 1; rn.ml = 0; rn.feature = 0; rn.thr = 0;
            rn.weight = clamp24(w > 8388607 ? 8388607 : (w < -8388607 ? -8388607 : w));
          end else begin
            rn.leaf = 0; rn.ml = bml; rn.feature = bf; rn.thr = bt; rn.weight = 0;
            if (d < D) begin
              next_valid[2 * n] = 1;
              next_valid[2 * n + 1] = 1;
            end
          end
          tree[d * 1024 + n] = rn;
          rq.push_back(rn);
          // move the node's samples to its children
          for (int e = 0; e < E; e++)
            for (int i = 0; i < S; i++)
              if (nodeof[e][i] == d * 1024 + n) begin
                if (rn.leaf) nodeof[e][i] = -1;
                else begin
                  logic [7:0] v;
                  bit left;
                  v = feat[e][i][rn.feature];
                  left = (v == 8'd255) ? rn.ml : (int'(v) <= rn.thr);
                  nodeof[e][i] = (d + 1) * 1024 + 2 * n + (left ? 0 : 1);
                end
              end
        end
        for (int n = 0; n < (1 << D); n++) valid_lvl[n] = next_valid[n];
      end
      // gradient update of all samples with this tree
      for (int e = 0; e < E; e++)
        for (int i = 0; i < S; i++) begin
          int d, n;
          d = 0; n = 0;
          while (!tree[d * 1024 + n].leaf) begin
            logic [7:0] v;
            bit left;
            v = feat[e][i][tree[d * 1024 + n].feature];
            left = (v == 8'd255) ? tree[d * 1024 + n].ml : (int'(v) <= tree[d * 1024 + n].thr);
            n = 2 * n + (left ? 0 : 1);
            d++;
          end
          r_score[e][i] = clamp24(r_score[e][i] + tree[d * 1024 + n].weight);
          ref_set_grad(e, i);
        end
    end
  endtask

  // ---- monitors -------------------------------------------------------
  int cur_run = 0;
  always @(posedge clk) begin
    cycles++;
    if (model_wr && rst_n) begin
      rnode_t dn;
      dn.run = cur_run; dn.tree = int'(model_tree); dn.depth = int'(model_depth);
      dn.idx = int'(model_idx); dn.leaf = model_node.leaf; dn.ml = model_node.missing_left;
      dn.feature = int'(model_node.feature); dn.thr = int'(model_node.threshold);
      dn.weight = longint'(model_node.weight);
      dq.push_back(dn);
      if (!dn.leaf) begin
        n_split++;
        if (dn.ml) n_ml++; else n_mr++;
      end else if (dn.depth < D) n_leaf_early++;
      else n_leaf_max++;
    end
    if (train_done) n_runs_done++;
    if (rst_n && dut.init_done[0] && int'(dut.init_count[0]) < S) n_dropped++;
  end

  // samples routed by the missing-value direction during a data split
  always @(posedge clk) begin
    if (dut.g_engine[0].u_engine.u_cls.split_mode && dut.g_engine[0].u_engine.dm_rd_valid &&
        dut.g_engine[0].u_engine.dm_rd_row[dut.g_engine[0].u_engine.u_cls.mm_rd_node[
          dut.g_engine[0].u_engine.u_cls.depth_q].feature] == 8'd255)
      n_missing_routed++;
  end

  // final state of engine memories
  longint d_score [E][S];
  longint d_g     [E][S];
  longint d_h     [E][S];
  logic snap = 1'b0;
  for (genvar ge = 0; ge < E; ge++) begin : g_peek
    always @(posedge snap)
      for (int i = 0; i < S; i++) begin
        d_score[ge][i] = longint'(dut.g_engine[ge].u_engine.u_dm.u_state.mem[i].score);
        d_g[ge][i]     = longint'(dut.g_engine[ge].u_engine.u_dm.u_state.mem[i].g);
        d_h[ge][i]     = longint'(dut.g_engine[ge].u_engine.u_dm.u_state.mem[i].h);
      end
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic mechanism(int count, string what);
    $display("mechanism %-28s %0d", what, count);
    check(count > 0, {"mechanism never happened: ", what});
  endtask

  // ---- stimulus ---------------------------------------------------------
  initial begin
    #1 rst_n = 0; load_en = 0; load_engine = '0; load_addr = '0; load_row = '0; load_label = 0;
    train_start = 0; num_samples = AWT'(S);
    // data: label from two features, a block of identical rows, missing values
    for (int e = 0; e < E; e++) begin
      r_lfsr[e] = 16'hACE1 ^ 16'(e * 40503);
      if (r_lfsr[e] == 0) r_lfsr[e] = 16'h1;
      for (int i = 0; i < S; i++) begin
        int score;
        for (int f = 0; f < F; f++) feat[e][i][f] = 8'($urandom_range(0, 15));
        if ($urandom_range(0, 7) == 0) feat[e][i][0] = 8'd255;
        if ($urandom_range(0, 7) == 0) feat[e][i][1] = 8'd255;
        score = (feat[e][i][0] == 8'd255) ? 12 : int'(feat[e][i][0]);
        score += (feat[e][i][1] == 8'd255) ? 0 : int'(feat[e][i][1]) / 2;
        label[e][i] = (score > 10) ^ ($urandom_range(0, 15) == 0);
        if (i % 4 == 3) begin
          for (int f = 0; f < F; f++) feat[e][i][f] = 8'd200;
          label[e][i] = 1'b1;
        end
      end
    end
    for (int r = 0; r < NRUNS; r++) ref_train_run(r);

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int e = 0; e < E; e++)
      for (int i = 0; i < S; i++) begin
        load_en <= 1; load_engine <= $bits(load_engine)'(e); load_addr <= AWT'(i);
        for (int f = 0; f < F; f++) load_row[f] <= feat[e][i][f];
        load_label <= label[e][i];
        @(posedge clk);
      end
    load_en <= 0;
    @(posedge clk);
    for (int r = 0; r < NRUNS; r++) begin
      longint t0;
      cur_run = r;
      train_start <= 1;
      @(posedge clk);
      train_start <= 0;
      t0 = cycles;
      @(posedge clk iff train_done);
      $display("run %0d: %0d trees in %0d cycles", r, T, cycles - t0);
      check_rate(cycles - t0);
      @(posedge clk);
    end
    repeat (4) @(posedge clk);

    // compare nodes
    check(dq.size() == rq.size(), $sformatf("node count dut %0d ref %0d", dq.size(), rq.size()));
    for (int k = 0; k < rq.size() && k < dq.size(); k++) begin
      rnode_t a, b;
      a = dq[k]; b = rq[k];
      check(a.run == b.run && a.tree == b.tree && a.depth == b.depth && a.idx == b.idx &&
            a.leaf == b.leaf && a.ml == b.ml && a.feature == b.feature && a.thr == b.thr &&
            a.weight == b.weight,
            $sformatf("node %0d: dut run%0d tree%0d d%0d n%0d leaf%0d ml%0d f%0d t%0d w%0d / ref run%0d tree%0d d%0d n%0d leaf%0d ml%0d f%0d t%0d w%0d",
              k, a.run, a.tree, a.depth, a.idx, a.leaf, a.ml, a.feature, a.thr, a.weight,
              b.run, b.tree, b.depth, b.idx, b.leaf, b.ml, b.feature, b.thr, b.weight));
    end
    // compare final sample state
    snap = 1'b1;
    #1;
    for (int e = 0; e < E; e++)
      for (int i = 0; i < S; i++)
        check(d_score[e][i] == r_score[e][i] && d_g[e][i] == r_g[e][i] && d_h[e][i] == r_h[e][i],
              $sformatf("state e%0d s%0d: dut %0d/%0d/%0d ref %0d/%0d/%0d", e, i,
                d_score[e][i], d_g[e][i], d_h[e][i], r_score[e][i], r_g[e][i], r_h[e][i]));

    mechanism(n_split, "split node");
    mechanism(n_leaf_max, "leaf at max depth");
    mechanism(n_missing_routed, "missing sample routed");
    mechanism(n_dropped, "sample left out by subsample");
    mechanism(n_mr, "missing values go right");
    if (ALL_MECH) begin
      // these need a deeper tree or a second run
      mechanism(n_leaf_early, "leaf before max depth");
      mechanism(n_ml, "missing values go left");
      mechanism(n_runs_done == NRUNS && NRUNS > 1 ? 1 : 0, "retraining run completed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
