// split_gain: the split gain calculation shared by all training engines.
//
// After the engines have built their gradient histograms for a node, start
// makes this unit read bin after bin from every engine (the missing-value
// bin first, then bins 0..254), add the N_ENGINES histograms of each feature,
// and keep running prefix sums GL / HL per feature. Every bin t of every
// feature is a candidate split "bin <= t goes left", evaluated twice, with
// the missing-value samples sent left and sent right, by the xgboost gain
//   gain = 1/2 [GL^2/(HL+lambda) + GR^2/(HR+lambda) - G^2/(H+lambda)] - gamma
// where G, H are the node totals (the sums of the engines' node_g / node_h).
// The features are scanned in parallel, one bin per cycle; a candidate needs
// HL > 0 and HR > 0. The best feature, threshold and missing-value direction
// are kept. The node becomes a leaf when it is at MAX_DEPTH or no candidate
// has a gain above zero; a leaf gets the weight -ETA * G / (H + lambda).
// The result is written to the model memory of every engine (node_wr) and
// done pulses in the same cycle. The result appears N_BINS + 6 cycles after start.
//
// The paper gives the order of operations (add the engines' histograms,
// evaluate all features and thresholds, take the maximum, decide leaf,
// missing direction and weight). The arithmetic follows xgboost's exact
// greedy algorithm, which the paper names; the learning rate ETA is not
// mentioned in the paper and defaults to xgboost's 0.3. The fixed-point
// formats and the pipeline are this design's.
module split_gain
  import gbdt_pkg::*;
#(
  parameter int N_ENGINES  = 64,
  parameter int N_FEATURES = 28,
  parameter int MAX_DEPTH  = 1,
  parameter int LAMBDA_Q   = 1 << FRAC,   // lambda = 1
  parameter int GAMMA_Q    = 0,           // gamma = 0
  parameter int ETA_Q      = 1229,        // learning rate 0.3
  localparam int DW = $clog2(MAX_DEPTH + 1),
  localparam int NW = (MAX_DEPTH > 0) ? MAX_DEPTH : 1
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  start,
  input  logic [DW-1:0]                         depth,
  input  logic [NW-1:0]                         node_idx,
  // histogram read port, broadcast to all engines
  output logic                                  hist_rd_en,
  output feat_t                                 hist_rd_bin,
  input  sum_t [N_ENGINES-1:0][N_FEATURES-1:0]  hist_g,
  input  sum_t [N_ENGINES-1:0][N_FEATURES-1:0]  hist_h,
  input  sum_t [N_ENGINES-1:0]                  node_g,
  input  sum_t [N_ENGINES-1:0]                  node_h,
  // result, written to the model memory of every engine
  output logic                                  node_wr,
  output logic [DW-1:0]                         node_depth,
  output logic [NW-1:0]                         node_widx,
  output node_t                                 node,
  output logic                                  done
);
  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_DRAIN, S_FINAL} st_e;
  st_e st;

  logic [8:0] k;            // scan counter 0..N_BINS
  logic [2:0] drain;

  sum_t tot_g, tot_h;
  gain_t parent_term;

  // stage 1: engines' data valid
  logic  s1_valid;
  feat_t s1_bin;
  // stage 2: summed histograms
  logic  s2_valid;
  feat_t s2_bin;
  sum_t [N_FEATURES-1:0] s2_g, s2_h;
  // prefix sums and missing bin
  sum_t [N_FEATURES-1:0] gl, hl, gm, hm;
  // stage 3: candidates
  logic  s3_valid;
  feat_t s3_bin;
  gain_t [N_FEATURES-1:0][1:0] s3_gain;
  logic  [N_FEATURES-1:0][1:0] s3_ok;
  // per-feature best
  gain_t [N_FEATURES-1:0] best_gain;
  feat_t [N_FEATURES-1:0] best_thr;
  logic  [N_FEATURES-1:0] best_ml, best_ok;

  function automatic gain_t term(input sum_t g, input sum_t h);
    gain_t num, den;
    num = gain_t'(g) * gain_t'(g);
    den = gain_t'(h) + gain_t'(LAMBDA_Q);
    if (den > 0) return num / den;
    return gain_t'(0);
  endfunction

  // engine sums of the bin read last cycle
  sum_t [N_FEATURES-1:0] sum_g, sum_h;
  sum_t sum_tg, sum_th;
  always_comb begin
    sum_g  = '0;
    sum_h  = '0;
    sum_tg = '0;
    sum_th = '0;
    for (int e = 0; e < N_ENGINES; e++) begin
      for (int f = 0; f < N_FEATURES; f++) begin
        sum_g[f] = sum_g[f] + hist_g[e][f];
        sum_h[f] = sum_h[f] + hist_h[e][f];
      end
      sum_tg = sum_tg + node_g[e];
      sum_th = sum_th + node_h[e];
    end
  end

  // candidate gains of stage 2 (prefix sums including this bin)
  gain_t [N_FEATURES-1:0][1:0] c_gain;
  logic  [N_FEATURES-1:0][1:0] c_ok;
  always_comb begin
    for (int f = 0; f < N_FEATURES; f++) begin
      for (int m = 0; m < 2; m++) begin   // m = 1: missing goes left
        sum_t lg, lh, rg, rh;
        lg = gl[f] + s2_g[f] + (m == 1 ? gm[f] : '0);
        lh = hl[f] + s2_h[f] + (m == 1 ? hm[f] : '0);
        rg = tot_g - lg;
        rh = tot_h - lh;
        c_ok[f][m]   = (lh > 0) && (rh > 0);
        c_gain[f][m] = term(lg, lh) + term(rg, rh) - parent_term;
      end
    end
  end

  // per-feature best after this cycle's candidates
  gain_t [N_FEATURES-1:0] nb_gain;
  feat_t [N_FEATURES-1:0] nb_thr;
  logic  [N_FEATURES-1:0] nb_ml, nb_ok;
  always_comb begin
    nb_gain = best_gain;
    nb_thr  = best_thr;
    nb_ml   = best_ml;
    nb_ok   = best_ok;
    if (s3_valid)
      for (int f = 0; f < N_FEATURES; f++)
        for (int m = 0; m < 2; m++)
          if (s3_ok[f][m] && (!nb_ok[f] || s3_gain[f][m] > nb_gain[f])) begin
            nb_ok[f]   = 1'b1;
            nb_gain[f] = s3_gain[f][m];
            nb_thr[f]  = s3_bin;
            nb_ml[f]   = (m == 1);
          end
  end

  // best over features
  logic  fin_found;
  int    fin_f;
  always_comb begin
    fin_found = 1'b0;
    fin_f     = 0;
    for (int f = 0; f < N_FEATURES; f++)
      if (best_ok[f] && (!fin_found || best_gain[f] > best_gain[fin_f])) begin
        fin_found = 1'b1;
        fin_f     = f;
      end
  end

  logic signed [63:0] leaf_w;
  always_comb begin
    gain_t den;
    den    = gain_t'(tot_h) + gain_t'(LAMBDA_Q);
    leaf_w = 64'sd0;
    if (den > 0) leaf_w = -((gain_t'(tot_g) <<< FRAC) / den);
    leaf_w = (leaf_w * ETA_Q) >>> FRAC;
    if (leaf_w > 64'sd8388607) leaf_w = 64'sd8388607;
    if (leaf_w < -64'sd8388607) leaf_w = -64'sd8388607;
  end

  assign hist_rd_en  = (st == S_SCAN);
  assign hist_rd_bin = (k == 0) ? feat_t'(MISSING_BIN) : feat_t'(k - 9'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      k <= '0; drain <= '0;
      tot_g <= '0; tot_h <= '0; parent_term <= '0;
      s1_valid <= 1'b0; s1_bin <= '0;
      s2_valid <= 1'b0; s2_bin <= '0; s2_g <= '0; s2_h <= '0;
      gl <= '0; hl <= '0; gm <= '0; hm <= '0;
      s3_valid <= 1'b0; s3_bin <= '0; s3_gain <= '0; s3_ok <= '0;
      best_gain <= '0; best_thr <= '0; best_ml <= '0; best_ok <= '0;
      node_wr <= 1'b0; done <= 1'b0; node <= '0;
      node_depth <= '0; node_widx <= '0;
    end else begin
      node_wr <= 1'b0;
      done    <= 1'b0;
      // pipeline
      s1_valid <= hist_rd_en;
      s1_bin   <= hist_rd_bin;
      s2_valid <= s1_valid;
      s2_bin   <= s1_bin;
      s2_g     <= sum_g;
      s2_h     <= sum_h;
      s3_valid <= s2_valid && (s2_bin != feat_t'(MISSING_BIN));
      s3_bin   <= s2_bin;
      s3_gain  <= c_gain;
      s3_ok    <= c_ok;
      if (s2_valid) begin
        if (s2_bin == feat_t'(MISSING_BIN)) begin
          gm <= s2_g;
          hm <= s2_h;
        end else begin
          for (int f = 0; f < N_FEATURES; f++) begin
            gl[f] <= gl[f] + s2_g[f];
            hl[f] <= hl[f] + s2_h[f];
          end
        end
      end
      best_gain <= nb_gain;
      best_thr  <= nb_thr;
      best_ml   <= nb_ml;
      best_ok   <= nb_ok;
      case (st)
        S_IDLE: if (start) begin
          st          <= S_SCAN;
          k           <= '0;
          tot_g       <= sum_tg;
          tot_h       <= sum_th;
          parent_term <= term(sum_tg, sum_th);
          gl <= '0; hl <= '0; gm <= '0; hm <= '0;
          best_ok     <= '0;   // overrides nb_ok: the pipeline is empty here
          node_depth  <= depth;
          node_widx   <= node_idx;
        end
        S_SCAN: begin
          k <= k + 1'b1;
          if (k == 9'(N_BINS - 1)) begin
            st    <= S_DRAIN;
            drain <= '0;
          end
        end
        S_DRAIN: begin
          drain <= drain + 1'b1;
          if (drain == 3'd3) st <= S_FINAL;
        end
        S_FINAL: begin
          st      <= S_IDLE;
          node_wr <= 1'b1;
          done    <= 1'b1;
          if (int'(node_depth) >= MAX_DEPTH || !fin_found ||
              best_gain[fin_f] <= gain_t'(2 * GAMMA_Q)) begin
            node.leaf         <= 1'b1;
            node.missing_left <= 1'b0;
            node.feature      <= '0;
            node.threshold    <= '0;
            node.weight       <= score_t'(leaf_w);
          end else begin
            node.leaf         <= 1'b0;
            node.missing_left <= best_ml[fin_f];
            node.feature      <= 8'(fin_f);
            node.threshold    <= best_thr[fin_f];
            node.weight       <= '0;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
