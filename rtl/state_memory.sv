// state_memory: per-sample training state of one engine: the accumulated
// score (the paper's "sample weight"), the gradient g, the hessian h and the
// binary label.
//
// The paper names what the memory holds; the field widths (see gbdt_pkg) and
// the single write / single read port organisation are this design's choice.
// rd_state is valid the cycle after rd_en (one clock, like an on-chip SRAM).
module state_memory
  import gbdt_pkg::*;
#(
  parameter int N_SAMPLES = 157,
  localparam int AW = $clog2(N_SAMPLES + 1)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  state_t        wr_state,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output state_t        rd_state
);
  state_t mem [N_SAMPLES];

  always_ff @(posedge clk) begin
    if (wr_en && wr_addr < AW'(N_SAMPLES)) mem[wr_addr] <= wr_state;
    if (rd_en) rd_state <= (rd_addr < AW'(N_SAMPLES)) ? mem[rd_addr] : '0;
  end
endmodule
