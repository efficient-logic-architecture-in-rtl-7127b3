// pointer_memory: the address table through which the training and
// classification units reach the samples of the node they work on.
//
// Two banks of N_SAMPLES sample indices are used alternately from one tree
// depth to the next: the samples of every node at depth d lie in a
// contiguous range [start, end) of bank d mod 2, and the data split writes
// the children's ranges into the other bank (left child from the start
// upwards, right child from the end downwards). The paper says only that the
// pointer memory holds the table and receives the split result; the two-bank
// organisation is this design's choice.
//
// Initialization (at the start of every tree) walks the samples 0..
// num_samples-1 and keeps a sample when the low byte of a 16-bit LFSR is
// below SUBSAMPLE_Q8, i.e. row subsampling with probability SUBSAMPLE_Q8/256
// (the paper trains with subsample = 0.5 but does not say where the
// subsampling happens). Kept samples are packed into bank 0 from address 0;
// init_done pulses with init_count, the root node's end address.
// Timing: one sample per cycle during init, init_done num_samples + 2
// cycles after init; rd_data valid one cycle after rd_en.
module pointer_memory #(
  parameter int          N_SAMPLES    = 157,
  parameter int          SUBSAMPLE_Q8 = 128,      // 0.5 * 256
  parameter logic [15:0] LFSR_SEED    = 16'hACE1,
  localparam int AW = $clog2(N_SAMPLES + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          init,
  input  logic [AW-1:0] num_samples,
  output logic          init_done,
  output logic [AW-1:0] init_count,
  input  logic          wr_en,
  input  logic          wr_bank,
  input  logic [AW-1:0] wr_addr,
  input  logic [AW-1:0] wr_data,
  input  logic          rd_en,
  input  logic          rd_bank,
  input  logic [AW-1:0] rd_addr,
  output logic [AW-1:0] rd_data
);
  logic [AW-1:0] mem [2][N_SAMPLES];

  logic          busy;
  logic [AW-1:0] idx;
  logic [15:0]   lfsr;
  logic          keep;

  assign keep = (SUBSAMPLE_Q8 >= 256) || (int'(lfsr[7:0]) < SUBSAMPLE_Q8);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      idx        <= '0;
      lfsr       <= LFSR_SEED;
      init_done  <= 1'b0;
      init_count <= '0;
    end else begin
      init_done <= 1'b0;
      if (init && !busy) begin
        busy       <= 1'b1;
        idx        <= '0;
        init_count <= '0;
      end else if (busy) begin
        if (idx >= num_samples || idx >= AW'(N_SAMPLES)) begin
          busy      <= 1'b0;
          init_done <= 1'b1;
        end else begin
          lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
          idx  <= idx + 1'b1;
          if (keep) init_count <= init_count + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (busy && idx < num_samples && idx < AW'(N_SAMPLES) && keep)
      mem[0][init_count] <= idx;
    else if (wr_en && wr_addr < AW'(N_SAMPLES))
      mem[wr_bank][wr_addr] <= wr_data;
    if (rd_en) rd_data <= (rd_addr < AW'(N_SAMPLES)) ? mem[rd_bank][rd_addr] : '0;
  end


  // The data split must not write while the table is being initialised.
  assert property (@(posedge clk) disable iff (!rst_n) !(busy && wr_en));

endmodule
