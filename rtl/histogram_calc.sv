// histogram_calc: the histogram calculation of one training engine, with its
// gradient histogram memories (one per feature, N_BINS bins, each bin holding
// the sum of g and the sum of h of the samples that fall into it).
//
// On start it walks the pointer-memory range [start_addr, end_addr) of the
// node being trained, one request per cycle, through the data memory's
// indirect read port. Each returned sample adds its g and h to bin
// row[f] of the histogram of every feature f in the same cycle, and to the
// node totals node_g / node_h. done pulses when the last sample has been
// added, end - start + 4 cycles after start (2 for an empty range). The paper describes this
// accumulation; the single-cycle read-modify-write (distributed-RAM style,
// asynchronous read) is this design's choice.
//
// The shared split-gain unit reads the histograms bin by bin through
// sg_rd_en / sg_rd_bin; the data of all features is valid the next cycle and
// the bin is cleared as it is read, so the histograms are empty again for
// the next node. clear (issued with the tree initialisation) empties all
// bins in N_BINS cycles and pulses clear_done; this covers power-up. Both
// clearing mechanisms are this design's choice.
module histogram_calc
  import gbdt_pkg::*;
#(
  parameter int N_SAMPLES  = 157,
  parameter int N_FEATURES = 28,
  localparam int AW = $clog2(N_SAMPLES + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  output logic                   clear_done,
  input  logic                   start,
  input  logic [AW-1:0]          start_addr,
  input  logic [AW-1:0]          end_addr,
  input  logic                   bank,
  output logic                   done,
  // data memory read port (indirect)
  output logic                   rd_en,
  output logic                   rd_bank,
  output logic [AW-1:0]          rd_addr,
  input  logic                   rd_valid,
  input  feat_t [N_FEATURES-1:0] rd_row,
  input  state_t                 rd_state,
  // node totals
  output sum_t                   node_g,
  output sum_t                   node_h,
  // split-gain read port (read and clear)
  input  logic                   sg_rd_en,
  input  feat_t                  sg_rd_bin,
  output sum_t [N_FEATURES-1:0]  sg_g,
  output sum_t [N_FEATURES-1:0]  sg_h
);
  sum_t hist_g [N_FEATURES][N_BINS];
  sum_t hist_h [N_FEATURES][N_BINS];

  logic          issuing, collecting;
  logic [AW-1:0] cur, last;
  logic [AW-1:0] remaining;
  logic          clearing;
  feat_t         clr_bin;
  logic          accept;

  assign rd_en   = issuing;
  assign rd_addr = cur;
  assign accept  = collecting && rd_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing    <= 1'b0;
      collecting <= 1'b0;
      cur        <= '0;
      last       <= '0;
      remaining  <= '0;
      rd_bank    <= 1'b0;
      done       <= 1'b0;
      node_g     <= '0;
      node_h     <= '0;
      clearing   <= 1'b0;
      clr_bin    <= '0;
      clear_done <= 1'b0;
    end else begin
      done       <= 1'b0;
      clear_done <= 1'b0;
      if (start) begin
        cur        <= start_addr;
        last       <= end_addr;
        rd_bank    <= bank;
        remaining  <= end_addr - start_addr;
        issuing    <= end_addr > start_addr;
        collecting <= 1'b1;
        node_g     <= '0;
        node_h     <= '0;
      end else begin
        if (issuing) begin
          cur <= cur + 1'b1;
          if (cur + 1'b1 == last) issuing <= 1'b0;
        end
        if (collecting) begin
          if (remaining == '0) begin
            collecting <= 1'b0;
            done       <= 1'b1;
          end else if (rd_valid) begin
            remaining <= remaining - 1'b1;
            node_g    <= node_g + sum_t'(rd_state.g);
            node_h    <= node_h + sum_t'(rd_state.h);
          end
        end
      end
      if (clear) begin
        clearing <= 1'b1;
        clr_bin  <= '0;
      end else if (clearing) begin
        clr_bin <= clr_bin + 1'b1;
        if (clr_bin == feat_t'(N_BINS - 1)) begin
          clearing   <= 1'b0;
          clear_done <= 1'b1;
        end
      end
    end
  end

  // Histogram memories: accumulate, read-and-clear, or sweep clear.
  always_ff @(posedge clk) begin
    for (int f = 0; f < N_FEATURES; f++) begin
      if (clearing) begin
        hist_g[f][clr_bin] <= '0;
        hist_h[f][clr_bin] <= '0;
      end else if (accept && remaining != '0) begin
        hist_g[f][rd_row[f]] <= hist_g[f][rd_row[f]] + sum_t'(rd_state.g);
        hist_h[f][rd_row[f]] <= hist_h[f][rd_row[f]] + sum_t'(rd_state.h);
      end else if (sg_rd_en) begin
        hist_g[f][sg_rd_bin] <= '0;
        hist_h[f][sg_rd_bin] <= '0;
      end
      if (sg_rd_en) begin
        sg_g[f] <= hist_g[f][sg_rd_bin];
        sg_h[f] <= hist_h[f][sg_rd_bin];
      end
    end
  end

  // Reading the histograms while they are still being built is a sequencing error.
  assert property (@(posedge clk) disable iff (!rst_n) !(sg_rd_en && collecting));
endmodule
