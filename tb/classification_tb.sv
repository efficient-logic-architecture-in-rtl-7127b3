// classification_tb: drives the classification unit with a behavioural data
// memory (two-cycle reads, indirect through a pointer table) and a
// behavioural per-depth model memory (one-cycle reads). Data split: the
// pointer entries written for a node must put exactly the samples that
// satisfy the branch condition (including missing values, both directions)
// in [start, mid) and the others in [mid, end), in the other bank. Gradient
// update: every sample's new score (old score plus the weight of the leaf it
// reaches in a depth-2 tree) and its g and h, from an independent sigmoid,
// and the score reset of init_scores. Done times are checked too.
`timescale 1ns/1ps
module classification_tb;
  import gbdt_pkg::*;
  localparam int N = 16, F = 3, D = 2, AW = $clog2(N + 1), DW = $clog2(D + 1), NW = D;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  logic split_start = 0, update_start = 0, init_scores = 0, bank = 0, done;
  logic [AW-1:0] start_addr = '0, end_addr = '0, num_samples = AW'(N), mid_addr;
  logic [DW-1:0] depth = '0;
  logic [NW-1:0] node_idx = '0;
  logic rd_en, rd_indirect, rd_bank, rd_valid;
  logic [AW-1:0] rd_addr, rd_sample;
  feat_t [F-1:0] rd_row;
  state_t rd_state;
  logic ptr_wr_en, ptr_wr_bank, st_wr_en;
  logic [AW-1:0] ptr_wr_addr, ptr_wr_data, st_wr_addr;
  state_t st_wr_state;
  logic [NW-1:0] mm_rd_idx [D+1];
  node_t mm_rd_node [D+1];
  int checks = 0, failures = 0;

  feat_t [F-1:0] rows [N];
  state_t        st   [N];
  int            ptr  [2][N];
  node_t         tree [D+1][1 << D];

  classification #(.N_SAMPLES(N), .N_FEATURES(F), .MAX_DEPTH(D)) dut (.*);

  // behavioural data memory
  logic v1; int s1;
  always_ff @(posedge clk) begin
    v1 <= rd_en;
    s1 <= rd_indirect ? ptr[rd_bank][rd_addr] : int'(rd_addr);
    rd_valid  <= v1;
    rd_sample <= AW'(s1);
    rd_row    <= rows[s1];
    rd_state  <= st[s1];
    if (ptr_wr_en) ptr[ptr_wr_bank][ptr_wr_addr] <= int'(ptr_wr_data);
  end
  // behavioural model memory
  always_ff @(posedge clk)
    for (int d = 0; d <= D; d++) mm_rd_node[d] <= tree[d][mm_rd_idx[d]];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic bit left_of(node_t n, int s);
    feat_t v;
    v = rows[s][n.feature];
    return (v == 8'd255) ? n.missing_left : (v <= n.threshold);
  endfunction

  function automatic longint sig(longint s);
    longint x, y;
    x = (s < 0) ? -s : s;
    if (x >= 20480) y = 4096;
    else if (x >= 9728) y = x / 32 + 3456;
    else if (x >= 4096) y = x / 8 + 2560;
    else y = x / 4 + 2048;
    return (s < 0) ? 4096 - y : y;
  endfunction

  task automatic do_split(int d, int n, int a, int b, int bk);
    int exp_left, t, seen_w;
    int members [int];
    exp_left = 0;
    for (int k = a; k < b; k++) begin
      members[ptr[bk][k]] = 1;
      if (left_of(tree[d][n], ptr[bk][k])) exp_left++;
    end
    @(negedge clk);
    split_start = 1; start_addr = AW'(a); end_addr = AW'(b); bank = bk[0];
    depth = DW'(d); node_idx = NW'(n);
    @(negedge clk) split_start = 0;
    t = 1;
    while (!done) begin @(negedge clk); t++; end
    check(t == ((b == a) ? 2 : b - a + 5), $sformatf("split done after %0d cycles", t));
    check(int'(mid_addr) == a + exp_left, $sformatf("mid %0d vs %0d", mid_addr, a + exp_left));
    for (int k = a; k < b; k++) begin
      int s;
      s = ptr[1 - bk][k];
      check(members.exists(s), "written index belongs to the node");
      if (members.exists(s)) members.delete(s);
      check(left_of(tree[d][n], s) == (k < a + exp_left), $sformatf("sample %0d on the wrong side", s));
    end
    check(members.size() == 0, "every sample written once");
  endtask

  task automatic do_update(bit init);
    state_t exp_st [N];
    int t, writes;
    for (int s = 0; s < N; s++) begin
      int d, n;
      longint sc, p;
      d = 0; n = 0;
      while (!tree[d][n].leaf) begin n = 2 * n + (left_of(tree[d][n], s) ? 0 : 1); d++; end
      sc = init ? 0 : longint'(st[s].score) + longint'(tree[d][n].weight);
      p = sig(sc);
      exp_st[s] = st[s];
      exp_st[s].score = score_t'(sc);
      exp_st[s].g = gh_t'(p - (st[s].label ? 4096 : 0));
      exp_st[s].h = gh_t'((p * (4096 - p)) / 4096);
    end
    @(negedge clk);
    update_start = 1; init_scores = init;
    @(negedge clk) update_start = 0;
    t = 1; writes = 0;
    while (!done) begin
      if (st_wr_en) begin
        writes++;
        check(st_wr_state == exp_st[st_wr_addr], $sformatf("state of sample %0d: score %0d vs %0d", st_wr_addr,
              st_wr_state.score, exp_st[st_wr_addr].score));
        st[st_wr_addr] = st_wr_state;
      end
      @(negedge clk); t++;
    end
    check(writes == N, $sformatf("%0d state writes", writes));
    check(t == N + D + 5, $sformatf("update done after %0d cycles", t));
  endtask

  initial begin
    for (int d = 0; d <= D; d++) mm_rd_idx[d] = '0;
    for (int i = 0; i < N; i++) begin
      for (int f = 0; f < F; f++) rows[i][f] = ($urandom_range(0, 4) == 0) ? 8'd255 : 8'($urandom_range(0, 9));
      st[i] = '0;
      st[i].score = score_t'($signed($urandom_range(0, 40000)) - 20000);
      st[i].label = 1'($urandom);
      ptr[0][i] = i;
      ptr[1][i] = (i * 7) % N;
    end
    // depth-2 tree: root split, left child split, right child leaf
    for (int d = 0; d <= D; d++) for (int n = 0; n < (1 << D); n++) begin
      tree[d][n] = '0; tree[d][n].leaf = 1;
      tree[d][n].weight = score_t'($signed($urandom_range(0, 6000)) - 3000);
    end
    tree[0][0] = '{leaf: 0, missing_left: 1, feature: 8'd1, threshold: 8'd4, weight: '0};
    tree[1][0] = '{leaf: 0, missing_left: 0, feature: 8'd2, threshold: 8'd6, weight: '0};
    tree[1][1].leaf = 1;
    #1 rst_n = 0;
    #20 rst_n = 1;
    do_split(0, 0, 0, N, 0);
    do_split(1, 0, 2, 13, 1);
    do_split(1, 0, 5, 5, 0);
    do_update(0);
    do_update(0);
    do_update(1);
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
