// classification: the classification unit of one training engine. It has two
// jobs, both driven by the control unit.
//
// Data split (split_start): the samples of one node, the pointer-memory range
// [start_addr, end_addr) of bank `bank`, are read one per cycle with their
// features and compared with the node's branch condition from the model
// memory (bin <= threshold goes left; the missing-value bin follows the
// node's missing-value direction). Each sample index is written into the
// other pointer bank, left-going samples from start_addr upwards and
// right-going ones from end_addr-1 downwards, so the two children occupy
// [start_addr, mid) and [mid, end_addr). done pulses with mid
// end - start + 5 cycles after split_start (2 for an empty node).
//
// Gradient update (update_start): every sample 0..num_samples-1 is read
// directly, the tree is walked one depth per cycle (one model-memory RAM per
// depth), the leaf weight is added to the sample's score, and g and h are
// recomputed from the new score and written back to the state memory. With
// init_scores the score is set to 0 instead, which starts a new training.
// One sample per cycle; done pulses num_samples + MAX_DEPTH + 5 cycles after
// update_start.
//
// The paper describes both tasks; the two-bank pointer write-back, the
// per-depth pipeline and the score reset at the start of training are this
// design's choices.
module classification
  import gbdt_pkg::*;
#(
  parameter int N_SAMPLES  = 157,
  parameter int N_FEATURES = 28,
  parameter int MAX_DEPTH  = 1,
  localparam int AW = $clog2(N_SAMPLES + 1),
  localparam int DW = $clog2(MAX_DEPTH + 1),
  localparam int NW = (MAX_DEPTH > 0) ? MAX_DEPTH : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // data split
  input  logic                   split_start,
  input  logic [AW-1:0]          start_addr,
  input  logic [AW-1:0]          end_addr,
  input  logic                   bank,
  input  logic [DW-1:0]          depth,
  input  logic [NW-1:0]          node_idx,
  output logic [AW-1:0]          mid_addr,
  // gradient update
  input  logic                   update_start,
  input  logic                   init_scores,
  input  logic [AW-1:0]          num_samples,
  output logic                   done,
  // data memory
  output logic                   rd_en,
  output logic                   rd_indirect,
  output logic                   rd_bank,
  output logic [AW-1:0]          rd_addr,
  input  logic                   rd_valid,
  input  logic [AW-1:0]          rd_sample,
  input  feat_t [N_FEATURES-1:0] rd_row,
  input  state_t                 rd_state,
  output logic                   ptr_wr_en,
  output logic                   ptr_wr_bank,
  output logic [AW-1:0]          ptr_wr_addr,
  output logic [AW-1:0]          ptr_wr_data,
  output logic                   st_wr_en,
  output logic [AW-1:0]          st_wr_addr,
  output state_t                 st_wr_state,
  // model memory
  output logic [NW-1:0]          mm_rd_idx  [MAX_DEPTH+1],
  input  node_t                  mm_rd_node [MAX_DEPTH+1]
);
  typedef struct packed {
    logic                   valid;
    logic [AW-1:0]          sample;
    feat_t [N_FEATURES-1:0] row;
    state_t                 state;
    logic [NW-1:0]          idx;
    logic                   found;
    score_t                 weight;
  } walk_t;

  logic          split_mode, update_mode, issuing, init_q, arm;
  logic [AW-1:0] cur, last, lo, hi, remaining;
  logic [DW-1:0] depth_q;
  logic [NW-1:0] node_q;

  walk_t pos      [MAX_DEPTH+2];
  walk_t resolved [MAX_DEPTH+2];

  assign rd_en       = issuing;
  assign rd_addr     = cur;
  assign rd_indirect = split_mode;

  // ---- branch decision -------------------------------------------------
  function automatic logic go_left(input node_t n, input feat_t [N_FEATURES-1:0] row);
    feat_t v;
    v = (int'(n.feature) < N_FEATURES) ? row[n.feature] : '0;
    return (v == feat_t'(MISSING_BIN)) ? n.missing_left : (v <= n.threshold);
  endfunction

  // ---- tree walk for the update ----------------------------------------
  always_comb begin
    resolved[0]       = '0;
    resolved[0].valid = update_mode && rd_valid;
    resolved[0].sample = rd_sample;
    resolved[0].row    = rd_row;
    resolved[0].state  = rd_state;
    for (int j = 1; j <= MAX_DEPTH + 1; j++) begin
      node_t n;
      n = mm_rd_node[j-1];
      resolved[j] = pos[j];
      if (!pos[j].found) begin
        if (n.leaf) begin
          resolved[j].found  = 1'b1;
          resolved[j].weight = n.weight;
        end else if (j <= MAX_DEPTH) begin
          resolved[j].idx = NW'({pos[j].idx, !go_left(n, pos[j].row)});
        end
      end
    end
    for (int j = 0; j <= MAX_DEPTH; j++)
      mm_rd_idx[j] = split_mode ? ((int'(depth_q) == j) ? node_q : '0) : resolved[j].idx;
  end

  // ---- new state of the sample leaving the walk ------------------------
  state_t new_state;
  always_comb begin
    walk_t w;
    w = resolved[MAX_DEPTH+1];
    new_state       = w.state;
    new_state.score = init_q ? '0 : sat_add(w.state.score, w.weight);
    new_state.g     = grad_of(new_state.score, w.state.label);
    new_state.h     = hess_of(new_state.score);
  end

  logic split_left;
  assign split_left = go_left(mm_rd_node[depth_q], rd_row);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      split_mode <= 1'b0; update_mode <= 1'b0; issuing <= 1'b0; init_q <= 1'b0; arm <= 1'b0;
      cur <= '0; last <= '0; lo <= '0; hi <= '0; remaining <= '0;
      depth_q <= '0; node_q <= '0; rd_bank <= 1'b0;
      mid_addr <= '0; done <= 1'b0;
      ptr_wr_en <= 1'b0; ptr_wr_bank <= 1'b0; ptr_wr_addr <= '0; ptr_wr_data <= '0;
      st_wr_en <= 1'b0; st_wr_addr <= '0; st_wr_state <= '0;
      for (int j = 1; j <= MAX_DEPTH + 1; j++) pos[j] <= '0;
    end else begin
      done      <= 1'b0;
      ptr_wr_en <= 1'b0;
      st_wr_en  <= 1'b0;
      for (int j = 1; j <= MAX_DEPTH + 1; j++) pos[j] <= resolved[j-1];

      if (split_start) begin
        split_mode <= 1'b1;
        depth_q    <= depth;
        node_q     <= node_idx;
        rd_bank    <= bank;
        cur        <= start_addr;
        last       <= end_addr;
        lo         <= start_addr;
        hi         <= end_addr;
        remaining  <= end_addr - start_addr;
        issuing    <= 1'b0;        // first cycle: model memory read
        arm        <= end_addr != start_addr;
      end else if (update_start) begin
        update_mode <= 1'b1;
        init_q      <= init_scores;
        cur         <= '0;
        last        <= num_samples;
        remaining   <= num_samples;
        issuing     <= num_samples != '0;
      end else begin
        if (arm) begin
          arm     <= 1'b0;
          issuing <= 1'b1;
        end
        if (issuing) begin
          cur <= cur + 1'b1;
          if (cur + 1'b1 == last) issuing <= 1'b0;
        end
        if (split_mode) begin
          if (rd_valid) begin
            remaining   <= remaining - 1'b1;
            ptr_wr_en   <= 1'b1;
            ptr_wr_bank <= ~rd_bank;
            ptr_wr_data <= rd_sample;
            if (split_left) begin
              ptr_wr_addr <= lo;
              lo          <= lo + 1'b1;
            end else begin
              ptr_wr_addr <= hi - 1'b1;
              hi          <= hi - 1'b1;
            end
          end else if (remaining == '0 && !issuing && !arm) begin
            split_mode <= 1'b0;
            mid_addr   <= lo;
            done       <= 1'b1;
          end
        end
        if (update_mode) begin
          if (resolved[MAX_DEPTH+1].valid) begin
            st_wr_en    <= 1'b1;
            st_wr_addr  <= resolved[MAX_DEPTH+1].sample;
            st_wr_state <= new_state;
            remaining   <= remaining - 1'b1;
          end else if (remaining == '0 && !issuing) begin
            update_mode <= 1'b0;
            done        <= 1'b1;
          end
        end
      end
    end
  end
endmodule
