// tb_ensemble_control_unit: self-checking test of the ensemble control unit.
//
// Four learners with random trees of depth 3 to 8.  Segments with random
// features and lengths are routed to random learners; the testbench ends
// invocations at random and computes each invocation's estimate
// floor(sum over segments of cycles * tree_of_learner(features) / T),
// T being the sum of the invocation's segment lengths.  Every power output
// is compared in order.  It also counts invocations in which some learner
// received no segment (end marker only) and in which learners finished out
// of order (a result waiting in a result FIFO), and fails if either never
// happened.
module tb_ensemble_control_unit;
  localparam int TM_NF = 8, TM_CNT_W = 20, TM_AW = 9, TM_RES_W = 16;
  localparam int K = 4, CL_W = 2, T_W = 32;
  `include "tree_model.svh"

  logic clk = 1'b0, rst_n = 1'b0;
  logic seg_valid, seg_inv_end, cfg_we, power_valid, overflow;
  logic [K-1:0] learner_en, learner_stall;
  logic [TM_CNT_W-1:0] seg_cycles;
  logic [TM_NF-1:0][TM_CNT_W-1:0] seg_feat;
  logic [T_W-1:0] seg_total;
  logic [CL_W-1:0] cfg_learner;
  logic [TM_AW-1:0] cfg_addr;
  logic [TM_NODE_W-1:0] cfg_data;
  logic [TM_RES_W-1:0] power;
  int checks = 0, failures = 0;
  tm_node_t trees [K][2**TM_AW];
  longint unsigned exp_q [$];
  int n_marker_only = 0, n_waiting = 0, n_pow = 0;

  always #5 clk = ~clk;

  ensemble_control_unit #(.NUM_LEARNERS(K), .NUM_FEAT(TM_NF), .CNT_W(TM_CNT_W),
    .RES_W(TM_RES_W), .NODE_AW(TM_AW), .FEAT_DEPTH(16), .RES_DEPTH(4)) dut (.*);

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

  always @(negedge clk) begin
    if (rst_n) begin
      // Result alignment: some learner has a result waiting while another has none.
      if (|dut.bl_res_valid && !(&dut.bl_res_valid)) n_waiting++;
      if (power_valid) begin
        n_pow++;
        if (exp_q.size() == 0) check(0, "unexpected power output");
        else begin
          longint unsigned e;
          e = exp_q.pop_front();
          check(power == TM_RES_W'(e), $sformatf("invocation %0d: power %0d exp %0d", n_pow, power, e));
        end
      end
    end
  end

  initial begin
    seg_valid = 0; seg_inv_end = 0; learner_en = '0; seg_cycles = '0; seg_feat = '0;
    seg_total = '0; cfg_we = 0; cfg_learner = '0; cfg_addr = '0; cfg_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < K; k++) begin
      tm_new_tree(3 + k + (k == 3 ? 2 : 0), 400);
      foreach (tm_img[a]) trees[k][a] = tm_img[a];
      for (int a = 0; a < tm_next_free; a++) begin
        @(negedge clk);
        cfg_we = 1; cfg_learner = CL_W'(k); cfg_addr = TM_AW'(a); cfg_data = tm_img[a];
      end
      @(negedge clk); cfg_we = 0;
    end
    for (int inv = 0; inv < 150; inv++) begin
      longint unsigned wsum, T;
      int n;
      bit [K-1:0] used;
      n = $urandom_range(1, 6);
      wsum = 0; T = 0; used = '0;
      for (int s = 0; s < n; s++) begin
        int k, cyc, nodes;
        logic [TM_RES_W-1:0] y;
        logic [TM_NF-1:0][TM_CNT_W-1:0] f;
        k = $urandom_range(0, K - 1);
        used[k] = 1;
        cyc = $urandom_range(1, 40);
        for (int i = 0; i < TM_NF; i++) f[i] = TM_CNT_W'($urandom_range(0, 400));
        foreach (tm_img[a]) tm_img[a] = trees[k][a];
        tm_eval(f, y, nodes);
        wsum += longint'(cyc) * longint'(y);
        T += cyc;
        if (s == n - 1) exp_q.push_back(wsum / T);
        @(negedge clk);
        seg_valid = 1; learner_en = K'(1) << k; seg_cycles = TM_CNT_W'(cyc); seg_feat = f;
        seg_inv_end = (s == n - 1); seg_total = T_W'(T);
        @(negedge clk);
        seg_valid = 0; learner_en = '0; seg_inv_end = 0;
        // Segments arrive no faster than their own length.
        repeat (cyc + 8) @(negedge clk);
      end
      if (used != '1) n_marker_only++;
    end
    repeat (2000) @(negedge clk);
    check(exp_q.size() == 0, $sformatf("%0d estimates missing", exp_q.size()));
    check(!overflow, "no overflow");
    check(n_marker_only > 0, "invocation with an idle learner exercised");
    check(n_waiting > 0, "out-of-order learner completion exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
