// gbdt_top_full_tb: the trainer at its default size, the paper's main
// configuration: 64 engines of 157 samples (10,048 training samples), 28
// features, depth 1, subsample 0.5, lambda 1, gamma 0, 100 trees. The data
// set is synthetic (the Higgs data set is not available to a testbench); its
// checks are those of gbdt_top_check.svh. It also checks that training the
// 100 trees takes no more than 250,000 cycles, the 2.5 ms the paper reports
// at its 100 MHz clock.
`timescale 1ns/1ps
module gbdt_top_full_tb;
  import gbdt_pkg::*;
  localparam int E = 64, S = 157, F = 28, D = 1, T = 100, NRUNS = 1;
  localparam bit ALL_MECH = 0;
  localparam int SUBQ = 128, LQ = 4096, GQ = 0, EQ = 1229;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic                   load_en, load_label, train_start, busy, train_done;
  logic [5:0]             load_engine;
  logic [7:0]             load_addr, num_samples;
  feat_t [F-1:0]          load_row;
  logic [6:0]             tree_idx, model_tree;
  logic                   model_wr;
  logic [0:0]             model_depth;
  logic [0:0]             model_idx;
  node_t                  model_node;

  gbdt_top dut (.*);

  task automatic check_rate(longint c);
    check(c <= 250000, $sformatf("100 trees took %0d cycles, paper: 2.5 ms at 100 MHz", c));
  endtask

  `include "gbdt_top_check.svh"

  initial begin
    #(10 * 600000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
