// tb_power_monitor_top: end-to-end test of the power monitor at reduced size.
//
// Six monitored signals, four learners, 16 states and 8-bit activity
// counters (so that state visits longer than 255 cycles are split), trees of
// depth up to 8.  Runs ordinary invocations, then a stress phase in which
// one learner lags and the others stall on full result FIFOs, then a burst
// that overflows a feature FIFO.  See top_tb_body.svh for the model.
module tb_power_monitor_top;
  localparam int NF = 6, K = 4, CW = 8, SW = 4, AW = 9, FD = 16, RD = 4;
  localparam int TREE_DEPTH = 8, N_INV = 60;
  localparam bit DO_STRESS = 1'b1, DO_SPLIT = 1'b1, WL_SWEEP = 1'b0;

  `include "top_tb_body.svh"

  initial begin
    @(run_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  power_monitor_top #(.NUM_FEAT(NF), .NUM_LEARNERS(K), .CNT_W(CW), .STATE_W(SW),
                      .NODE_AW(AW), .FEAT_DEPTH(FD), .RES_DEPTH(RD)) dut (.*);
endmodule
