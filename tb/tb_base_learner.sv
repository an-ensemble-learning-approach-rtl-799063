// tb_base_learner: self-checking test of one base learner.
//
// Loads a random depth-6 tree, then sends invocations made of random state
// segments (features and lengths) followed by an end marker, either riding
// on the last segment or alone.  For each invocation the expected result is
// sum(cycles * tree(features)), with the tree walked in software.  Results
// are drained slowly at first so that the result FIFO fills and the learner
// must stall; at the end a burst of segments overflows the feature FIFO.
module tb_base_learner;
  localparam int TM_NF = 20, TM_CNT_W = 20, TM_AW = 9, TM_RES_W = 16;
  localparam int ACC_W = 48, FD = 16, RD = 4;
  `include "tree_model.svh"

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_has_feat, in_inv_end;
  logic [TM_CNT_W-1:0] in_cycles;
  logic [TM_NF-1:0][TM_CNT_W-1:0] in_feat;
  logic res_valid, res_pop, feat_overflow, stall, cfg_we;
  logic [ACC_W-1:0] res_data;
  logic [TM_AW-1:0] cfg_addr;
  logic [TM_NODE_W-1:0] cfg_data;
  int checks = 0, failures = 0;
  longint unsigned exp_q [$];
  int n_stall = 0, n_ovf = 0, n_res = 0;
  bit slow_drain = 1;

  always #5 clk = ~clk;

  base_learner #(.NUM_FEAT(TM_NF), .CNT_W(TM_CNT_W), .RES_W(TM_RES_W), .ACC_W(ACC_W),
                 .NODE_AW(TM_AW), .FEAT_DEPTH(FD), .RES_DEPTH(RD)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Result drain and compare.
  always @(negedge clk) begin
    if (rst_n) begin
      if (stall) n_stall++;
      if (feat_overflow) n_ovf++;
      res_pop = res_valid && (slow_drain ? ($urandom_range(0, 60) == 0) : 1'b1);
      if (res_pop) begin
        n_res++;
        if (exp_q.size() == 0) check(0, "unexpected result");
        else begin
          longint unsigned e;
          e = exp_q.pop_front();
          check(res_data == ACC_W'(e), $sformatf("result %0d: %0d exp %0d", n_res, res_data, e));
        end
      end
    end else res_pop = 0;
  end

  task automatic send(input bit has_feat, input bit inv_end, input int cyc,
                      input logic [TM_NF-1:0][TM_CNT_W-1:0] f);
    @(negedge clk);
    in_valid = 1; in_has_feat = has_feat; in_inv_end = inv_end;
    in_cycles = TM_CNT_W'(cyc); in_feat = f;
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    in_valid = 0; in_has_feat = 0; in_inv_end = 0; in_cycles = '0; in_feat = '0;
    cfg_we = 0; cfg_addr = '0; cfg_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    tm_new_tree(6, 300);
    for (int a = 0; a < tm_next_free; a++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = TM_AW'(a); cfg_data = tm_img[a];
    end
    @(negedge clk); cfg_we = 0;
    for (int inv = 0; inv < 80; inv++) begin
      longint unsigned sum;
      int n;
      bit alone;
      if (inv == 40) slow_drain = 0;
      n = $urandom_range(0, 6);
      alone = (n == 0) || ($urandom_range(0, 2) == 0);
      sum = 0;
      begin
        logic [TM_NF-1:0][TM_CNT_W-1:0] fs [8];
        int cycs [8];
        for (int k = 0; k < n; k++) begin
          logic [TM_RES_W-1:0] y;
          int nodes;
          for (int i = 0; i < TM_NF; i++) fs[k][i] = TM_CNT_W'($urandom_range(0, 300));
          cycs[k] = $urandom_range(1, 3000);
          tm_eval(fs[k], y, nodes);
          sum += longint'(cycs[k]) * longint'(y);
        end
        exp_q.push_back(sum);
        for (int k = 0; k < n; k++) begin
          send(1'b1, (k == n - 1) && !alone, cycs[k], fs[k]);
          // Leave the tree time so the feature FIFO does not overflow here.
          repeat (20) @(negedge clk);
        end
      end
      if (alone) send(1'b0, 1'b1, 0, '0);
      // Wait while the learner is blocked on a full result FIFO.
      while (stall) @(negedge clk);
    end
    repeat (400) @(negedge clk);
    check(exp_q.size() == 0, $sformatf("%0d results missing", exp_q.size()));
    check(n_stall > 0, "result FIFO back-pressure (stall) exercised");
    check(n_ovf == 0, "no overflow in normal operation");
    // Overflow: 24 back-to-back segments into a 16-entry FIFO.
    for (int k = 0; k < 24; k++) begin
      @(negedge clk);
      in_valid = 1; in_has_feat = 1; in_inv_end = 0; in_cycles = 1; in_feat = '0;
    end
    @(negedge clk); in_valid = 0;
    check(n_ovf > 0, "feature FIFO overflow flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
