// tb_power_monitor_onehot: end-to-end test of the power monitor built for a
// one-hot state register (STATE_ONEHOT = 1).
//
// Same application model, phases and checks as the reduced-size end-to-end
// test (six signals, four learners, 16 states, 8-bit counters), but the
// state is presented to the monitor as a 16-bit one-hot register, the form
// in which HLS tools usually generate the controller.  Every estimate must
// equal the one the model computes from the state numbers.
module tb_power_monitor_onehot;
  localparam int NF = 6, K = 4, CW = 8, SW = 4, AW = 9, FD = 16, RD = 4;
  localparam int TREE_DEPTH = 8, N_INV = 40;
  localparam bit DO_STRESS = 1'b1, DO_SPLIT = 1'b1, WL_SWEEP = 1'b0;

  `include "top_tb_body.svh"

  initial begin
    @(run_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [2**SW-1:0] state_oh;
  assign state_oh = (2**SW)'(1) << state;

  power_monitor_top #(.NUM_FEAT(NF), .NUM_LEARNERS(K), .CNT_W(CW), .STATE_W(SW),
                      .NODE_AW(AW), .FEAT_DEPTH(FD), .RES_DEPTH(RD),
                      .STATE_ONEHOT(1'b1)) dut (.state(state_oh), .*);
endmodule
