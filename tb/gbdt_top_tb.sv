// gbdt_top_tb: end-to-end test of the data-parallel trainer at a reduced
// size (2 engines of 16 samples, 3 features, depth 2, 4 trees, two training
// runs back to back). The checking is in gbdt_top_check.svh: every trained
// node and the final state of every sample are compared with a software
// reference, and every mechanism of the design (split, early and max-depth
// leaves, both missing-value directions, subsampling, retraining) must occur.
// The cycle count of a run is checked against an upper bound derived from
// the per-step latencies of the units.
`timescale 1ns/1ps
module gbdt_top_tb;
  import gbdt_pkg::*;
  localparam int E = 2, S = 16, F = 3, D = 2, T = 4, NRUNS = 2;
  localparam bit ALL_MECH = 1;
  localparam int SUBQ = 192, LQ = 4096, GQ = 0, EQ = 1229;
  localparam int EW = 1, TW = $clog2(T + 1), DWT = $clog2(D + 1);

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic                  load_en, load_label, train_start, busy, train_done;
  logic [EW-1:0]         load_engine;
  logic [$clog2(S+1)-1:0] load_addr, num_samples;
  feat_t [F-1:0]         load_row;
  logic [TW-1:0]         tree_idx, model_tree;
  logic                  model_wr;
  logic [DWT-1:0]        model_depth;
  logic [D-1:0]          model_idx;
  node_t                 model_node;

  gbdt_top #(
    .N_ENGINES(E), .N_SAMPLES(S), .N_FEATURES(F), .MAX_DEPTH(D), .N_TREES(T),
    .SUBSAMPLE_Q8(SUBQ), .LAMBDA_Q(LQ), .GAMMA_Q(GQ), .ETA_Q(EQ)
  ) dut (.*);

  // Upper bound on one run: score reset, then per tree the initialisation
  // (histogram clear, N_BINS cycles), at most 2^(D+1)-1 nodes each with a
  // histogram pass, a split-gain scan and a data split, and the update.
  task automatic check_rate(longint c);
    longint bound;
    bound = (S + D + 8) + T * ((N_BINS + 8) + ((1 << (D + 1)) - 1) * ((S + 6) + (N_BINS + 8) + (S + 8)) + (S + D + 8));
    check(c <= bound, $sformatf("run took %0d cycles, bound %0d", c, bound));
  endtask

  `include "gbdt_top_check.svh"

  initial begin
    #(10 * 400000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
