// control: the control unit that sequences the training of all engines.
//
// One run (train_start) trains N_TREES trees:
//   1. all engines reset their sample scores (gradient update with
//      init_scores), so every run starts from score 0;
//   2. per tree, init: pointer memories (with subsampling), model memories
//      and histograms are initialised; each engine's init_count becomes the
//      root node's range [0, init_count);
//   3. per node, depth by depth: hist_start (histograms), then sg_start
//      (split gain over all engines); if the node is not a leaf, split_start
//      (data split) and the engines' mid addresses give the children's ranges
//      [start, mid) and [mid, end) for the next depth;
//   4. update_start: gradient update of every sample with the new tree;
//   5. after N_TREES trees, train_done pulses and the unit waits for the
//      next train_start.
// Every command is a one-cycle pulse to all engines; the unit then waits for
// the done pulse of every engine (or of the split-gain unit). Node ranges
// are kept per engine in two tables used alternately by depth, matching the
// pointer bank (bank = depth mod 2).
//
// Steps 2 to 6 follow the paper's dataflow. The score reset, the command /
// done handshake and the node tables are this design's choices.
module control #(
  parameter int N_ENGINES = 64,
  parameter int N_SAMPLES = 157,
  parameter int MAX_DEPTH = 1,
  parameter int N_TREES   = 100,
  localparam int AW = $clog2(N_SAMPLES + 1),
  localparam int DW = $clog2(MAX_DEPTH + 1),
  localparam int NW = (MAX_DEPTH > 0) ? MAX_DEPTH : 1,
  localparam int NN = 1 << MAX_DEPTH,
  localparam int TW = $clog2(N_TREES + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          train_start,
  output logic                          busy,
  output logic                          train_done,
  output logic [TW-1:0]                 tree_idx,
  // engine commands
  output logic                          init,
  output logic                          hist_start,
  output logic                          split_start,
  output logic                          update_start,
  output logic                          init_scores,
  output logic [N_ENGINES-1:0][AW-1:0]  start_addr,
  output logic [N_ENGINES-1:0][AW-1:0]  end_addr,
  output logic                          bank,
  output logic [DW-1:0]                 depth,
  output logic [NW-1:0]                 node_idx,
  input  logic [N_ENGINES-1:0]          init_done,
  input  logic [N_ENGINES-1:0][AW-1:0]  init_count,
  input  logic [N_ENGINES-1:0]          hist_done,
  input  logic [N_ENGINES-1:0]          cls_done,
  input  logic [N_ENGINES-1:0][AW-1:0]  mid_addr,
  // split gain
  output logic                          sg_start,
  input  logic                          sg_done,
  input  logic                          sg_leaf
);
  typedef enum logic [3:0] {
    S_IDLE, S_TREE_INIT, S_NODE, S_HIST, S_GAIN, S_SPLIT,
    S_NEXT, S_UPDATE, S_WAIT
  } st_e;
  st_e st, after_wait;

  logic [N_ENGINES-1:0] seen, seen_n;
  logic                 sg_seen;
  logic                 leaf_q;

  logic [AW-1:0] tab_start [2][NN][N_ENGINES];
  logic [AW-1:0] tab_end   [2][NN][N_ENGINES];
  logic          tab_valid [2][NN];

  logic [NW-1:0] child_l, child_r;
  assign child_l = NW'({node_idx, 1'b0});
  assign child_r = NW'({node_idx, 1'b1});
  assign seen_n = seen | init_done | hist_done | cls_done;
  assign bank   = depth[0];
  assign busy   = (st != S_IDLE);

  always_comb begin
    for (int e = 0; e < N_ENGINES; e++) begin
      start_addr[e] = tab_start[bank][node_idx][e];
      end_addr[e]   = tab_end[bank][node_idx][e];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; after_wait <= S_IDLE;
      seen <= '0; sg_seen <= 1'b0; leaf_q <= 1'b0;
      tree_idx <= '0; depth <= '0; node_idx <= '0;
      init <= 1'b0; hist_start <= 1'b0; split_start <= 1'b0; update_start <= 1'b0;
      init_scores <= 1'b0; sg_start <= 1'b0; train_done <= 1'b0;
      for (int b = 0; b < 2; b++)
        for (int n = 0; n < NN; n++) begin
          tab_valid[b][n] <= 1'b0;
          for (int e = 0; e < N_ENGINES; e++) begin
            tab_start[b][n][e] <= '0;
            tab_end[b][n][e]   <= '0;
          end
        end
    end else begin
      init <= 1'b0; hist_start <= 1'b0; split_start <= 1'b0; update_start <= 1'b0;
      sg_start <= 1'b0; train_done <= 1'b0;
      seen    <= seen_n;
      sg_seen <= sg_seen | sg_done;
      if (sg_done) leaf_q <= sg_leaf;
      // children ranges from the data split
      for (int e = 0; e < N_ENGINES; e++)
        if (cls_done[e] && st == S_WAIT && after_wait == S_NEXT && depth < DW'(MAX_DEPTH)) begin
          tab_start[~bank][child_l][e] <= tab_start[bank][node_idx][e];
          tab_end  [~bank][child_l][e] <= mid_addr[e];
          tab_start[~bank][child_r][e] <= mid_addr[e];
          tab_end  [~bank][child_r][e] <= tab_end[bank][node_idx][e];
        end
      // root range from the pointer initialisation
      for (int e = 0; e < N_ENGINES; e++)
        if (init_done[e]) begin
          tab_start[0][0][e] <= '0;
          tab_end[0][0][e]   <= init_count[e];
        end

      case (st)
        S_IDLE: if (train_start) begin
          tree_idx    <= '0;
          update_start <= 1'b1;
          init_scores <= 1'b1;
          seen        <= '0;
          st          <= S_WAIT;
          after_wait  <= S_TREE_INIT;
        end
        S_TREE_INIT: begin
          init        <= 1'b1;
          init_scores <= 1'b0;
          depth       <= '0;
          node_idx    <= '0;
          for (int b = 0; b < 2; b++)
            for (int n = 0; n < NN; n++) tab_valid[b][n] <= (b == 0 && n == 0);
          seen       <= '0;
          st         <= S_WAIT;
          after_wait <= S_NODE;
        end
        S_NODE: begin
          if (tab_valid[bank][node_idx]) begin
            hist_start <= 1'b1;
            seen       <= '0;
            st         <= S_WAIT;
            after_wait <= S_GAIN;
          end else st <= S_NEXT;
        end
        S_GAIN: begin
          sg_start   <= 1'b1;
          sg_seen    <= 1'b0;
          st         <= S_WAIT;
          after_wait <= S_SPLIT;
        end
        S_SPLIT: begin
          if (leaf_q) st <= S_NEXT;
          else begin
            split_start <= 1'b1;
            seen        <= '0;
            st          <= S_WAIT;
            after_wait  <= S_NEXT;
            if (depth < DW'(MAX_DEPTH)) begin
              tab_valid[~bank][child_l] <= 1'b1;
              tab_valid[~bank][child_r] <= 1'b1;
            end
          end
        end
        S_NEXT: begin
          tab_valid[bank][node_idx] <= 1'b0;
          if (int'(node_idx) == (1 << depth) - 1 || int'(node_idx) == NN - 1) begin
            node_idx <= '0;
            if (int'(depth) == MAX_DEPTH) st <= S_UPDATE;
            else begin
              depth <= depth + 1'b1;
              st    <= S_NODE;
            end
          end else begin
            node_idx <= node_idx + 1'b1;
            st       <= S_NODE;
          end
        end
        S_UPDATE: begin
          update_start <= 1'b1;
          seen         <= '0;
          st           <= S_WAIT;
          after_wait   <= S_IDLE;   // replaced below when the tree is finished
        end
        S_WAIT: begin
          if ((after_wait == S_SPLIT) ? sg_seen : (&seen_n)) begin
            seen <= '0;
            if (after_wait == S_IDLE) begin
              // a tree has been added to every sample's score
              tree_idx <= tree_idx + 1'b1;
              if (int'(tree_idx) + 1 >= N_TREES) begin
                train_done <= 1'b1;
                st         <= S_IDLE;
              end else st <= S_TREE_INIT;
            end else st <= after_wait;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
