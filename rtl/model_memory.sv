// model_memory: the decision tree being trained, one RAM per depth.
//
// Depth d holds the 2^d nodes of that level (node_t: leaf flag, missing-value
// direction, feature, threshold, leaf weight). The children of node n at
// depth d are nodes 2n and 2n+1 at depth d+1. Keeping one RAM per depth, as
// the paper does, lets the gradient update look a sample up at every depth
// in a pipeline, one depth per clock.
//
// init (start of every tree) writes "leaf with weight 0" into every node, one
// index per cycle in all depths at once, and pulses init_done
// 2^MAX_DEPTH + 1 cycles after init. Nodes are written by the split-gain unit through
// wr_en / wr_depth / wr_idx / wr_node. Each depth has its own read port;
// rd_node[d] is valid the cycle after rd_idx[d] is presented (always
// reading). The node encoding and the init value are this design's choice.
module model_memory
  import gbdt_pkg::*;
#(
  parameter int MAX_DEPTH = 1,
  localparam int DW = $clog2(MAX_DEPTH + 1),
  localparam int NW = (MAX_DEPTH > 0) ? MAX_DEPTH : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                init,
  output logic                init_done,
  input  logic                wr_en,
  input  logic [DW-1:0]       wr_depth,
  input  logic [NW-1:0]       wr_idx,
  input  node_t               wr_node,
  input  logic [NW-1:0]       rd_idx  [MAX_DEPTH+1],
  output node_t               rd_node [MAX_DEPTH+1]
);
  logic          busy;
  logic [NW:0]   ci;
  node_t         init_node;

  always_comb begin
    init_node        = '0;
    init_node.leaf   = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      ci        <= '0;
      init_done <= 1'b0;
    end else begin
      init_done <= 1'b0;
      if (init) begin
        busy <= 1'b1;
        ci   <= '0;
      end else if (busy) begin
        ci <= ci + 1'b1;
        if (ci == (NW+1)'((1 << MAX_DEPTH) - 1)) begin
          busy      <= 1'b0;
          init_done <= 1'b1;
        end
      end
    end
  end

  for (genvar d = 0; d <= MAX_DEPTH; d++) begin : g_depth
    node_t mem [1 << d];
    always_ff @(posedge clk) begin
      if (busy && int'(ci) < (1 << d))
        mem[ci[NW-1:0] & NW'((1 << d) - 1)] <= init_node;
      else if (wr_en && int'(wr_depth) == d)
        mem[wr_idx & NW'((1 << d) - 1)] <= wr_node;
      rd_node[d] <= mem[rd_idx[d] & NW'((1 << d) - 1)];
    end
  end
endmodule
