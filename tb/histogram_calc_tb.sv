// histogram_calc_tb: drives the histogram unit with a behavioural data
// memory (two-cycle indirect reads through a random pointer table) and
// checks, for several node ranges: the done time (end - start + 4 cycles after
// start, 2 for an empty range),
// the node totals, every bin of every feature read through the split-gain
// port against a software histogram, and that reading cleared the bins. An
// empty range and the clear sweep (N_BINS cycles) are checked too.
`timescale 1ns/1ps
module histogram_calc_tb;
  import gbdt_pkg::*;
  localparam int N = 32, F = 3, AW = $clog2(N + 1);
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  logic clear = 0, clear_done, start = 0, bank = 0, done;
  logic [AW-1:0] start_addr = '0, end_addr = '0;
  logic rd_en, rd_bank, rd_valid;
  logic [AW-1:0] rd_addr;
  feat_t [F-1:0] rd_row;
  state_t rd_state;
  sum_t node_g, node_h;
  logic sg_rd_en = 0;
  feat_t sg_rd_bin = '0;
  sum_t [F-1:0] sg_g, sg_h;
  int checks = 0, failures = 0;

  feat_t [F-1:0] rows [N];
  state_t        st   [N];
  int            ptr  [2][N];

  histogram_calc #(.N_SAMPLES(N), .N_FEATURES(F)) dut (.*);

  // behavioural data memory
  logic v1; int s1;
  always_ff @(posedge clk) begin
    v1 <= rd_en;
    s1 <= ptr[rd_bank][rd_addr];
    rd_valid <= v1;
    rd_row   <= rows[s1];
    rd_state <= st[s1];
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic run_node(int a, int b, int bk);
    longint hg [F][N_BINS];
    longint hh [F][N_BINS];
    longint G, H;
    int t;
    G = 0; H = 0;
    for (int f = 0; f < F; f++) for (int x = 0; x < N_BINS; x++) begin hg[f][x] = 0; hh[f][x] = 0; end
    for (int k = a; k < b; k++) begin
      int s;
      s = ptr[bk][k];
      G += st[s].g; H += st[s].h;
      for (int f = 0; f < F; f++) begin
        hg[f][rows[s][f]] += st[s].g;
        hh[f][rows[s][f]] += st[s].h;
      end
    end
    @(negedge clk);
    start = 1; start_addr = AW'(a); end_addr = AW'(b); bank = bk[0];
    @(negedge clk) start = 0;
    t = 1;
    while (!done) begin @(negedge clk); t++; end
    check(t == ((b == a) ? 2 : b - a + 4), $sformatf("done after %0d cycles for %0d samples", t, b - a));
    check(longint'(node_g) == G && longint'(node_h) == H, "node totals");
    for (int pass = 0; pass < 2; pass++)
      for (int x = 0; x < N_BINS; x++) begin
        sg_rd_en = 1; sg_rd_bin = feat_t'(x);
        @(negedge clk);
        sg_rd_en = 0;
        for (int f = 0; f < F; f++)
          if (pass == 0)
            check(longint'(sg_g[f]) == hg[f][x] && longint'(sg_h[f]) == hh[f][x],
                  $sformatf("bin %0d feature %0d", x, f));
          else if (x % 17 == 0)
            check(sg_g[f] == 0 && sg_h[f] == 0, "cleared after read");
      end
  endtask

  initial begin
    int t;
    #1 rst_n = 0;
    #20 rst_n = 1;
    for (int i = 0; i < N; i++) begin
      // few distinct values so bins collide often, some missing values
      for (int f = 0; f < F; f++) rows[i][f] = ($urandom_range(0, 5) == 0) ? 8'd255 : 8'($urandom_range(0, 6));
      st[i] = '0;
      st[i].g = gh_t'($signed($urandom_range(0, 8191)) - 4096);
      st[i].h = gh_t'($urandom_range(0, 1024));
      ptr[0][i] = $urandom_range(0, N - 1);
      ptr[1][i] = N - 1 - i;
    end
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    t = 1;
    while (!clear_done) begin @(negedge clk); t++; end
    check(t == N_BINS + 1, $sformatf("clear took %0d cycles", t));
    run_node(0, N, 0);
    run_node(5, 17, 1);
    run_node(9, 9, 0);
    run_node(20, 32, 0);
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
