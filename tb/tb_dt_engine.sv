// tb_dt_engine: self-checking test of the decision tree regression engine.
//
// Loads random trees of depth 3 to 8 (the tuned depth range) through the
// configuration port, presents random feature vectors as a FIFO head would,
// and compares every result with a software walk of the same tree.  It also
// checks the latency: done must rise exactly 2n+1 cycles after the start,
// n being the number of nodes on the path (leaf included), and the vector
// must be popped exactly once, in the done cycle.
module tb_dt_engine;
  localparam int TM_NF = 20, TM_CNT_W = 20, TM_AW = 9, TM_RES_W = 16;
  `include "tree_model.svh"

  logic clk = 1'b0, rst_n = 1'b0;
  logic feat_valid, feat_pop, done, busy, cfg_we;
  logic [TM_NF-1:0][TM_CNT_W-1:0] feat;
  logic [TM_RES_W-1:0] result;
  logic [TM_AW-1:0] cfg_addr;
  logic [TM_NODE_W-1:0] cfg_data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  dt_engine #(.NUM_FEAT(TM_NF), .CNT_W(TM_CNT_W), .RES_W(TM_RES_W), .NODE_AW(TM_AW)) dut (.*);

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

  task automatic load_tree();
    for (int a = 0; a < tm_next_free; a++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = TM_AW'(a); cfg_data = tm_img[a];
    end
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    int max_nodes_seen = 0;
    feat_valid = 0; feat = '0; cfg_we = 0; cfg_addr = '0; cfg_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      int depth;
      depth = 3 + (t % 6);
      tm_new_tree(depth, 1000);
      load_tree();
      for (int v = 0; v < 40; v++) begin
        logic [TM_RES_W-1:0] exp_res;
        int exp_nodes, cyc, pops;
        for (int i = 0; i < TM_NF; i++) feat[i] = TM_CNT_W'($urandom_range(0, 1000));
        tm_eval(feat, exp_res, exp_nodes);
        if (exp_nodes > max_nodes_seen) max_nodes_seen = exp_nodes;
        @(negedge clk);
        check(!busy, "engine idle before start");
        feat_valid = 1;
        @(posedge clk);          // start accepted at this edge (cycle 0)
        cyc = 0; pops = 0;
        do begin
          @(negedge clk);
          cyc++;
          if (feat_pop) pops++;
        end while (!done && cyc < 100);
        check(result == exp_res, $sformatf("tree %0d vec %0d: result %0d exp %0d", t, v, result, exp_res));
        check(cyc == 2*exp_nodes + 1, $sformatf("tree %0d vec %0d: latency %0d exp %0d", t, v, cyc, 2*exp_nodes+1));
        check(pops == 1 && feat_pop, "single pop in done cycle");
        // Back-to-back use: drop valid after the pop.
        feat_valid = (v % 2 == 0);
        if (!feat_valid) begin
          @(negedge clk);
        end else begin
          feat_valid = 0;
        end
        repeat (2) @(negedge clk);
        check(!busy, "idle again");
      end
    end
    check(max_nodes_seen >= 9, "a depth-8 path (9 nodes) was exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
