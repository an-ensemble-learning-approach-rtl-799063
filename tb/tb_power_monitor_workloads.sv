// tb_power_monitor_workloads: the power monitor at its default size, run
// with the model sizes of the evaluated benchmarks.
//
// For each of eleven benchmark configurations (Atax, Bicg, Bbgemm, Gemver,
// Gemmncubed, Matrixmult, JPGizigzag, JPGshift, Symm, Syr2k, Doitgen) it
// resets the monitor, loads as many random trees as the benchmark's
// ensemble has base learners (21 to 64), makes only the benchmark's number
// of monitored signals (10, 20 or 30) toggle, maps twice as many states as
// learners onto them, and runs invocations, the stall phase and the
// overflow phase with every estimate checked against the model of
// top_tb_body.svh.  The learner and signal counts are the published ones;
// the state counts and the trees are stand-ins, since a trained model is
// not available.  Unused learners receive only end markers.
module tb_power_monitor_workloads;
  localparam int NF = 30, K = 64, CW = 20, SW = 8, AW = 9, FD = 16, RD = 4;
  localparam int TREE_DEPTH = 8, N_INV = 60;
  localparam bit DO_STRESS = 1'b1, DO_SPLIT = 1'b0, WL_SWEEP = 1'b1;

  `include "top_tb_body.svh"

  initial begin
    @(run_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  power_monitor_top dut (.*);
endmodule
