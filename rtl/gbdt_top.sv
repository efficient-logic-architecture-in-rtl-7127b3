// gbdt_top: data-parallel trainer of gradient boosting decision trees for
// binary classification (cross-entropy loss) on 8-bit binned features.
//
// N_ENGINES training engines each hold N_SAMPLES training samples. For every
// node, each engine builds gradient histograms of its own samples; the shared
// split-gain unit adds them, picks the best split and writes the node into
// the model memory of every engine; the engines then split their samples and,
// after the tree is complete, update the scores and gradients of all their
// samples. The control unit sequences this for N_TREES trees.
//
// Host side: samples are loaded with load_en (engine, address, 8-bit feature
// row, label) before train_start; num_samples is the number of samples loaded
// into every engine. Each node the trainer decides is also presented on the
// model_* outputs for one cycle (model_wr), with the index of the tree it
// belongs to, so the host can collect the whole ensemble. train_done pulses
// when the last tree has been applied.
//
// The defaults are the paper's main configuration: 64 engines, 10,048
// training samples (157 per engine), max_depth 1, subsample 0.5, lambda 1,
// gamma 0, 100 trees. The number of features (28, the Higgs data set) and
// the learning rate (0.3, xgboost's default) are not given by the paper.
module gbdt_top
  import gbdt_pkg::*;
#(
  parameter int N_ENGINES    = 64,
  parameter int N_SAMPLES    = 157,
  parameter int N_FEATURES   = 28,
  parameter int MAX_DEPTH    = 1,
  parameter int N_TREES      = 100,
  parameter int SUBSAMPLE_Q8 = 128,
  parameter int LAMBDA_Q     = 1 << FRAC,
  parameter int GAMMA_Q      = 0,
  parameter int ETA_Q        = 1229,
  localparam int AW = $clog2(N_SAMPLES + 1),
  localparam int DW = $clog2(MAX_DEPTH + 1),
  localparam int NW = (MAX_DEPTH > 0) ? MAX_DEPTH : 1,
  localparam int EW = (N_ENGINES > 1) ? $clog2(N_ENGINES) : 1,
  localparam int TW = $clog2(N_TREES + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // sample loading
  input  logic                   load_en,
  input  logic [EW-1:0]          load_engine,
  input  logic [AW-1:0]          load_addr,
  input  feat_t [N_FEATURES-1:0] load_row,
  input  logic                   load_label,
  input  logic [AW-1:0]          num_samples,
  // training
  input  logic                   train_start,
  output logic                   busy,
  output logic                   train_done,
  output logic [TW-1:0]          tree_idx,
  // trained nodes
  output logic                   model_wr,
  output logic [TW-1:0]          model_tree,
  output logic [DW-1:0]          model_depth,
  output logic [NW-1:0]          model_idx,
  output node_t                  model_node
);
  logic                                  init, hist_start, split_start, update_start, init_scores;
  logic [N_ENGINES-1:0][AW-1:0]          start_addr, end_addr, init_count, mid_addr;
  logic                                  bank;
  logic [DW-1:0]                         depth;
  logic [NW-1:0]                         node_idx;
  logic [N_ENGINES-1:0]                  init_done, hist_done, cls_done;
  logic                                  sg_start, sg_done;
  logic                                  sg_rd_en;
  feat_t                                 sg_rd_bin;
  sum_t [N_ENGINES-1:0][N_FEATURES-1:0]  sg_g, sg_h;
  sum_t [N_ENGINES-1:0]                  node_g, node_h;
  logic                                  mm_wr;
  logic [DW-1:0]                         mm_depth;
  logic [NW-1:0]                         mm_idx;
  node_t                                 mm_node;

  control #(
    .N_ENGINES(N_ENGINES), .N_SAMPLES(N_SAMPLES), .MAX_DEPTH(MAX_DEPTH), .N_TREES(N_TREES)
  ) u_ctrl (
    .clk, .rst_n, .train_start, .busy, .train_done, .tree_idx,
    .init, .hist_start, .split_start, .update_start, .init_scores,
    .start_addr, .end_addr, .bank, .depth, .node_idx,
    .init_done, .init_count, .hist_done, .cls_done, .mid_addr,
    .sg_start, .sg_done, .sg_leaf(mm_node.leaf)
  );

  split_gain #(
    .N_ENGINES(N_ENGINES), .N_FEATURES(N_FEATURES), .MAX_DEPTH(MAX_DEPTH),
    .LAMBDA_Q(LAMBDA_Q), .GAMMA_Q(GAMMA_Q), .ETA_Q(ETA_Q)
  ) u_sg (
    .clk, .rst_n, .start(sg_start), .depth, .node_idx,
    .hist_rd_en(sg_rd_en), .hist_rd_bin(sg_rd_bin),
    .hist_g(sg_g), .hist_h(sg_h), .node_g, .node_h,
    .node_wr(mm_wr), .node_depth(mm_depth), .node_widx(mm_idx), .node(mm_node),
    .done(sg_done)
  );

  for (genvar e = 0; e < N_ENGINES; e++) begin : g_engine
    localparam logic [15:0] SEED0 = 16'hACE1 ^ 16'(e * 40503);
    localparam logic [15:0] SEED  = (SEED0 == 16'h0) ? 16'h1 : SEED0;
    training_engine #(
      .N_SAMPLES(N_SAMPLES), .N_FEATURES(N_FEATURES), .MAX_DEPTH(MAX_DEPTH),
      .SUBSAMPLE_Q8(SUBSAMPLE_Q8), .LFSR_SEED(SEED)
    ) u_engine (
      .clk, .rst_n,
      .load_en(load_en && int'(load_engine) == e), .load_addr, .load_row, .load_label,
      .num_samples,
      .init, .init_done(init_done[e]), .init_count(init_count[e]),
      .hist_start, .split_start, .update_start, .init_scores,
      .start_addr(start_addr[e]), .end_addr(end_addr[e]), .bank, .depth, .node_idx,
      .hist_done(hist_done[e]), .cls_done(cls_done[e]), .mid_addr(mid_addr[e]),
      .node_g(node_g[e]), .node_h(node_h[e]),
      .sg_rd_en, .sg_rd_bin, .sg_g(sg_g[e]), .sg_h(sg_h[e]),
      .mm_wr_en(mm_wr), .mm_wr_depth(mm_depth), .mm_wr_idx(mm_idx), .mm_wr_node(mm_node)
    );
  end

  assign model_wr    = mm_wr;
  assign model_tree  = tree_idx;
  assign model_depth = mm_depth;
  assign model_idx   = mm_idx;
  assign model_node  = mm_node;
endmodule
