// tb_dt_feature_controller: self-checking test of the feature controller.
//
// Checks that act_value shows the feature named by act_sel one cycle later
// for random vectors and selects, that cal_start is raised only when a
// vector waits and the walker is idle, and that the FIFO pop follows the
// walker's done.
module tb_dt_feature_controller;
  localparam int NF = 20, CW = 20, FAW = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  logic feat_valid, feat_pop, fsm_idle, fsm_done, cal_start;
  logic [NF-1:0][CW-1:0] feat;
  logic [FAW-1:0] act_sel;
  logic [CW-1:0] act_value;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  dt_feature_controller #(.NUM_FEAT(NF), .CNT_W(CW)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [CW-1:0] exp_val;
    feat_valid = 0; fsm_idle = 1; fsm_done = 0; act_sel = '0; feat = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      for (int f = 0; f < NF; f++) feat[f] = CW'($urandom);
      act_sel    = FAW'($urandom_range(0, NF - 1));
      feat_valid = 1'($urandom_range(0, 1));
      fsm_idle   = 1'($urandom_range(0, 1));
      fsm_done   = 1'($urandom_range(0, 1));
      exp_val    = feat[act_sel];
      #1;
      check(cal_start == (feat_valid && fsm_idle), "cal_start");
      check(feat_pop == fsm_done, "pop on done");
      @(posedge clk); #1;
      check(act_value == exp_val, $sformatf("act_value %h exp %h", act_value, exp_val));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
