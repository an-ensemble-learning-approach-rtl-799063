// tb_dt_fsm: self-checking test of the decision tree walker FSM on its own.
//
// The testbench plays the structure memory (synchronous read of a random
// tree image) and the feature controller (registered feature select).  For
// random trees and feature vectors it checks the leaf value, the state
// sequence I, (N, S) once per visited node, R, I, and therefore the
// 2n+1-cycle latency, and that idle and done match the states.
module tb_dt_fsm;
  import pm_pkg::*;
  localparam int TM_NF = 12, TM_CNT_W = 20, TM_AW = 9, TM_RES_W = 16;
  `include "tree_model.svh"

  logic clk = 1'b0, rst_n = 1'b0;
  logic cal_start, idle, done;
  logic [TM_CNT_W-1:0] act_value;
  logic [TM_FAW-1:0] act_sel;
  logic [TM_AW-1:0] mem_addr;
  logic [TM_NODE_W-1:0] mem_rdata;
  logic [TM_RES_W-1:0] result;
  dt_state_e fsm_state;
  logic [TM_NF-1:0][TM_CNT_W-1:0] feat;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  dt_fsm #(.NUM_FEAT(TM_NF), .CNT_W(TM_CNT_W), .RES_W(TM_RES_W), .NODE_AW(TM_AW)) dut (.*);

  // Memory and feature register models.
  always_ff @(posedge clk) begin
    mem_rdata <= tm_img[mem_addr];
    act_value <= feat[act_sel];
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cal_start = 0; feat = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 10; t++) begin
      int depth;
      depth = 3 + (t % 6);
      tm_new_tree(depth, (t % 2) ? 500 : 6);
      for (int v = 0; v < 30; v++) begin
        logic [TM_RES_W-1:0] exp_res;
        int exp_nodes;
        dt_state_e seq [$];
        for (int i = 0; i < TM_NF; i++) feat[i] = TM_CNT_W'($urandom_range(0, (t % 2) ? 500 : 6));
        tm_eval(feat, exp_res, exp_nodes);
        @(negedge clk);
        check(idle && fsm_state == DT_IDLE, "idle before start");
        cal_start = 1;
        @(negedge clk);
        cal_start = 0;
        seq.delete();
        while (fsm_state != DT_IDLE && seq.size() < 100) begin
          seq.push_back(fsm_state);
          check(done == (fsm_state == DT_RES), "done only in R");
          check(!idle, "not idle while walking");
          if (fsm_state == DT_RES) check(result == exp_res, $sformatf("result %0d exp %0d", result, exp_res));
          @(negedge clk);
        end
        check(seq.size() == 2*exp_nodes + 1, $sformatf("latency %0d exp %0d", seq.size(), 2*exp_nodes + 1));
        for (int k = 0; k < seq.size(); k++) begin
          dt_state_e e;
          e = (k == seq.size() - 1) ? DT_RES : ((k % 2 == 0) ? DT_NODE : DT_STALL);
          check(seq[k] == e, $sformatf("state %0d is %s exp %s", k, seq[k].name(), e.name()));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
