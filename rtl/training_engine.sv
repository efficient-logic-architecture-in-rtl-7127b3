// training_engine: one training engine of the data-parallel trainer. It holds
// a share of the training samples and everything that works on them alone:
// the data memory (pointer, feature and state memories), the histogram
// calculation with its gradient histogram memories, the classification unit
// and a copy of the model memory.
//
// The shared control unit drives the engine with command pulses; the engine
// answers each with a done pulse:
//   init         pointer-memory initialisation with subsampling, model-memory
//                initialisation and histogram clearing, in parallel;
//                init_done when all three have finished, with init_count
//                (number of subsampled samples, the root node's end address)
//   hist_start   build the histograms of node range [start_addr, end_addr)
//                of pointer bank `bank`; hist_done
//   split_start  data split of that range by node (depth, node_idx);
//                cls_done with mid_addr
//   update_start gradient update of all samples (init_scores: reset scores);
//                cls_done
// The shared split-gain unit reads the histograms through sg_rd_en/sg_rd_bin
// and writes the trained node into the model memory through mm_wr_*. The
// histogram unit and the classification unit are never active together, so
// they share the data memory's read port. The engine boundary and its
// contents follow the paper's data-parallel block diagram; the command and
// done signalling is this design's.
module training_engine
  import gbdt_pkg::*;
#(
  parameter int          N_SAMPLES    = 157,
  parameter int          N_FEATURES   = 28,
  parameter int          MAX_DEPTH    = 1,
  parameter int          SUBSAMPLE_Q8 = 128,
  parameter logic [15:0] LFSR_SEED    = 16'hACE1,
  localparam int AW = $clog2(N_SAMPLES + 1),
  localparam int DW = $clog2(MAX_DEPTH + 1),
  localparam int NW = (MAX_DEPTH > 0) ? MAX_DEPTH : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // host loading
  input  logic                   load_en,
  input  logic [AW-1:0]          load_addr,
  input  feat_t [N_FEATURES-1:0] load_row,
  input  logic                   load_label,
  input  logic [AW-1:0]          num_samples,
  // commands from the control unit
  input  logic                   init,
  output logic                   init_done,
  output logic [AW-1:0]          init_count,
  input  logic                   hist_start,
  input  logic                   split_start,
  input  logic                   update_start,
  input  logic                   init_scores,
  input  logic [AW-1:0]          start_addr,
  input  logic [AW-1:0]          end_addr,
  input  logic                   bank,
  input  logic [DW-1:0]          depth,
  input  logic [NW-1:0]          node_idx,
  output logic                   hist_done,
  output logic                   cls_done,
  output logic [AW-1:0]          mid_addr,
  // split-gain unit
  output sum_t                   node_g,
  output sum_t                   node_h,
  input  logic                   sg_rd_en,
  input  feat_t                  sg_rd_bin,
  output sum_t [N_FEATURES-1:0]  sg_g,
  output sum_t [N_FEATURES-1:0]  sg_h,
  input  logic                   mm_wr_en,
  input  logic [DW-1:0]          mm_wr_depth,
  input  logic [NW-1:0]          mm_wr_idx,
  input  node_t                  mm_wr_node
);
  // data memory port
  logic                   dm_rd_en, dm_rd_indirect, dm_rd_bank;
  logic [AW-1:0]          dm_rd_addr;
  logic                   dm_rd_valid;
  logic [AW-1:0]          dm_rd_sample;
  feat_t [N_FEATURES-1:0] dm_rd_row;
  state_t                 dm_rd_state;
  logic                   ptr_wr_en, ptr_wr_bank;
  logic [AW-1:0]          ptr_wr_addr, ptr_wr_data;
  logic                   st_wr_en;
  logic [AW-1:0]          st_wr_addr;
  state_t                 st_wr_state;
  // requesters
  logic                   h_rd_en, h_rd_bank;
  logic [AW-1:0]          h_rd_addr;
  logic                   c_rd_en, c_rd_indirect, c_rd_bank;
  logic [AW-1:0]          c_rd_addr;
  // init completion
  logic                   dm_init_done, mm_init_done, h_clear_done;
  logic [2:0]             init_seen, init_seen_n;
  logic [NW-1:0]          mm_rd_idx  [MAX_DEPTH+1];
  node_t                  mm_rd_node [MAX_DEPTH+1];

  assign dm_rd_en       = h_rd_en | c_rd_en;
  assign dm_rd_indirect = c_rd_en ? c_rd_indirect : 1'b1;
  assign dm_rd_bank     = c_rd_en ? c_rd_bank : h_rd_bank;
  assign dm_rd_addr     = c_rd_en ? c_rd_addr : h_rd_addr;

  data_memory #(
    .N_SAMPLES(N_SAMPLES), .N_FEATURES(N_FEATURES),
    .SUBSAMPLE_Q8(SUBSAMPLE_Q8), .LFSR_SEED(LFSR_SEED)
  ) u_dm (
    .clk, .rst_n,
    .load_en, .load_addr, .load_row, .load_label,
    .init, .num_samples, .init_done(dm_init_done), .init_count,
    .rd_en(dm_rd_en), .rd_indirect(dm_rd_indirect), .rd_bank(dm_rd_bank), .rd_addr(dm_rd_addr),
    .rd_valid(dm_rd_valid), .rd_sample(dm_rd_sample), .rd_row(dm_rd_row), .rd_state(dm_rd_state),
    .ptr_wr_en, .ptr_wr_bank, .ptr_wr_addr, .ptr_wr_data,
    .st_wr_en, .st_wr_addr, .st_wr_state
  );

  histogram_calc #(.N_SAMPLES(N_SAMPLES), .N_FEATURES(N_FEATURES)) u_hist (
    .clk, .rst_n,
    .clear(init), .clear_done(h_clear_done),
    .start(hist_start), .start_addr, .end_addr, .bank, .done(hist_done),
    .rd_en(h_rd_en), .rd_bank(h_rd_bank), .rd_addr(h_rd_addr),
    .rd_valid(dm_rd_valid), .rd_row(dm_rd_row), .rd_state(dm_rd_state),
    .node_g, .node_h,
    .sg_rd_en, .sg_rd_bin, .sg_g, .sg_h
  );

  classification #(
    .N_SAMPLES(N_SAMPLES), .N_FEATURES(N_FEATURES), .MAX_DEPTH(MAX_DEPTH)
  ) u_cls (
    .clk, .rst_n,
    .split_start, .start_addr, .end_addr, .bank, .depth, .node_idx, .mid_addr,
    .update_start, .init_scores, .num_samples, .done(cls_done),
    .rd_en(c_rd_en), .rd_indirect(c_rd_indirect), .rd_bank(c_rd_bank), .rd_addr(c_rd_addr),
    .rd_valid(dm_rd_valid), .rd_sample(dm_rd_sample), .rd_row(dm_rd_row), .rd_state(dm_rd_state),
    .ptr_wr_en, .ptr_wr_bank, .ptr_wr_addr, .ptr_wr_data,
    .st_wr_en, .st_wr_addr, .st_wr_state,
    .mm_rd_idx, .mm_rd_node
  );

  model_memory #(.MAX_DEPTH(MAX_DEPTH)) u_mm (
    .clk, .rst_n,
    .init, .init_done(mm_init_done),
    .wr_en(mm_wr_en), .wr_depth(mm_wr_depth), .wr_idx(mm_wr_idx), .wr_node(mm_wr_node),
    .rd_idx(mm_rd_idx), .rd_node(mm_rd_node)
  );

  // init_done once the three parts of the initialisation have all finished
  assign init_seen_n = init_seen | {h_clear_done, mm_init_done, dm_init_done};
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_seen <= '0;
      init_done <= 1'b0;
    end else begin
      init_done <= 1'b0;
      if (init) init_seen <= '0;
      else if (&init_seen_n) begin
        init_seen <= '0;
        init_done <= 1'b1;
      end else init_seen <= init_seen_n;
    end
  end

  // The two readers of the data memory must never overlap.
  assert property (@(posedge clk) disable iff (!rst_n) !(h_rd_en && c_rd_en));
endmodule
