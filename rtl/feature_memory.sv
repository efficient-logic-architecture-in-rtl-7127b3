// feature_memory: the 8-bit feature values of every sample held by one
// training engine, one row of N_FEATURES bins per sample.
//
// The paper's feature memory is an on-chip SRAM read with one clock of
// latency for sequential and random addresses alike; that is what this
// array models. A whole row is written and read at once so that the
// histogram unit can update all per-feature histograms in the same cycle.
// Interface: one write port (host loading) and one read port; rd_row is valid
// the cycle after rd_en. The row-wide port is this design's choice.
module feature_memory
  import gbdt_pkg::*;
#(
  parameter int N_SAMPLES  = 157,
  parameter int N_FEATURES = 28,
  localparam int AW = $clog2(N_SAMPLES + 1)
) (
  input  logic                         clk,
  input  logic                         wr_en,
  input  logic [AW-1:0]                wr_addr,
  input  feat_t [N_FEATURES-1:0]       wr_row,
  input  logic                         rd_en,
  input  logic [AW-1:0]                rd_addr,
  output feat_t [N_FEATURES-1:0]       rd_row
);
  feat_t [N_FEATURES-1:0] mem [N_SAMPLES];

  always_ff @(posedge clk) begin
    if (wr_en && wr_addr < AW'(N_SAMPLES)) mem[wr_addr] <= wr_row;
    if (rd_en) rd_row <= (rd_addr < AW'(N_SAMPLES)) ? mem[rd_addr] : '0;
  end
endmodule
