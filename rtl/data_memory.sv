// data_memory: one engine's data memory, holding the pointer memory, the
// feature memory and the state memory (the dashed box of the engine block
// diagram), plus the indirect addressing that ties them together.
//
// A read request names either a pointer-memory address (indirect: the
// pointer table gives the sample index, which then addresses the feature and
// state memories) or a sample index directly (used by the gradient update,
// which walks all samples in order). Both kinds return after exactly two
// cycles, so a requester may issue one read per clock and match answers by
// counting: cycle 0 request, cycle 1 pointer read, cycle 2 rd_valid with the
// sample index, its feature row and its state. The paper gives the contents
// and the indirection; the fixed two-cycle latency is this design's.
//
// init starts the pointer-memory initialisation (with subsampling), which
// ends with init_done and init_count (the root node's end address).
module data_memory
  import gbdt_pkg::*;
#(
  parameter int          N_SAMPLES    = 157,
  parameter int          N_FEATURES   = 28,
  parameter int          SUBSAMPLE_Q8 = 128,
  parameter logic [15:0] LFSR_SEED    = 16'hACE1,
  localparam int AW = $clog2(N_SAMPLES + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // host loading of samples
  input  logic                   load_en,
  input  logic [AW-1:0]          load_addr,
  input  feat_t [N_FEATURES-1:0] load_row,
  input  logic                   load_label,
  // pointer initialisation
  input  logic                   init,
  input  logic [AW-1:0]          num_samples,
  output logic                   init_done,
  output logic [AW-1:0]          init_count,
  // read port
  input  logic                   rd_en,
  input  logic                   rd_indirect,
  input  logic                   rd_bank,
  input  logic [AW-1:0]          rd_addr,
  output logic                   rd_valid,
  output logic [AW-1:0]          rd_sample,
  output feat_t [N_FEATURES-1:0] rd_row,
  output state_t                 rd_state,
  // pointer write (data split)
  input  logic                   ptr_wr_en,
  input  logic                   ptr_wr_bank,
  input  logic [AW-1:0]          ptr_wr_addr,
  input  logic [AW-1:0]          ptr_wr_data,
  // state write (gradient update)
  input  logic                   st_wr_en,
  input  logic [AW-1:0]          st_wr_addr,
  input  state_t                 st_wr_state
);
  logic [AW-1:0] ptr_q;
  logic          s1_valid, s1_indirect;
  logic [AW-1:0] s1_addr;
  logic [AW-1:0] sample;
  logic          st_we;
  logic [AW-1:0] st_wa;
  state_t        st_wd;

  pointer_memory #(
    .N_SAMPLES(N_SAMPLES), .SUBSAMPLE_Q8(SUBSAMPLE_Q8), .LFSR_SEED(LFSR_SEED)
  ) u_ptr (
    .clk, .rst_n, .init, .num_samples, .init_done, .init_count,
    .wr_en(ptr_wr_en), .wr_bank(ptr_wr_bank), .wr_addr(ptr_wr_addr), .wr_data(ptr_wr_data),
    .rd_en(rd_en && rd_indirect), .rd_bank, .rd_addr, .rd_data(ptr_q)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid    <= 1'b0;
      s1_indirect <= 1'b0;
      s1_addr     <= '0;
      rd_valid    <= 1'b0;
      rd_sample   <= '0;
    end else begin
      s1_valid    <= rd_en;
      s1_indirect <= rd_indirect;
      s1_addr     <= rd_addr;
      rd_valid    <= s1_valid;
      rd_sample   <= sample;
    end
  end

  assign sample = s1_indirect ? ptr_q : s1_addr;

  feature_memory #(.N_SAMPLES(N_SAMPLES), .N_FEATURES(N_FEATURES)) u_feat (
    .clk, .wr_en(load_en), .wr_addr(load_addr), .wr_row(load_row),
    .rd_en(s1_valid), .rd_addr(sample), .rd_row
  );

  // Host loading writes the label with the initial state (score 0); the
  // gradient update writes the rest of training.
  always_comb begin
    st_we = load_en || st_wr_en;
    st_wa = load_en ? load_addr : st_wr_addr;
    if (load_en) begin
      st_wd.score = '0;
      st_wd.g     = grad_of('0, load_label);
      st_wd.h     = hess_of('0);
      st_wd.label = load_label;
    end else begin
      st_wd = st_wr_state;
    end
  end

  state_memory #(.N_SAMPLES(N_SAMPLES)) u_state (
    .clk, .wr_en(st_we), .wr_addr(st_wa), .wr_state(st_wd),
    .rd_en(s1_valid), .rd_addr(sample), .rd_state
  );
endmodule
