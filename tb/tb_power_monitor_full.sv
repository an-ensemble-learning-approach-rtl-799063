// tb_power_monitor_full: end-to-end test of the power monitor at its
// default size: 30 monitored signals, 64 base learners, 256 states, 20-bit
// counters, 512-node tree memories, 16-entry feature FIFOs.
//
// Loads 64 random trees and a random state-to-cluster table, then runs
// ordinary invocations, the lagging-learner stress phase and a feature FIFO
// overflow, comparing every estimate with the model in top_tb_body.svh.
// Visits longer than 2**20 - 1 cycles, which would be split, are not
// simulated at this size.
module tb_power_monitor_full;
  localparam int NF = 30, K = 64, CW = 20, SW = 8, AW = 9, FD = 16, RD = 4;
  localparam int TREE_DEPTH = 8, N_INV = 200;
  localparam bit DO_STRESS = 1'b1, DO_SPLIT = 1'b0, WL_SWEEP = 1'b0;

  `include "top_tb_body.svh"

  initial begin
    @(run_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  power_monitor_top dut (.*);
endmodule
