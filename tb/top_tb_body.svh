// top_tb_body.svh: end-to-end test body shared by the power monitor
// testbenches.  Included in a module that defines NF, K, CW, SW, AW, FD,
// RD, TREE_DEPTH, N_INV, DO_STRESS, DO_SPLIT, WL_SWEEP, instantiates
// power_monitor_top as dut and prints the result line when run_done fires.
//
// The testbench plays an FSMD application: it walks random state visits,
// toggles the monitored signals with a state-dependent probability and
// raises inv_done at the end of each invocation.  An independent model
// counts rising edges, cuts the trace into segments (one per state visit,
// also cut at invocation ends and at 2**CW-1 cycles), looks up each
// segment's cluster, walks that learner's tree in software and forms
// floor(sum(cycles * y) / T) per invocation.  Every power output is compared.
// It also measures the latency from inv_done to power_valid whenever a
// single invocation is outstanding, and checks that the idle minimum lies
// between the divider's 17 cycles and one worst-case tree walk, aggregation
// and division.
//
// The activity counter pipeline makes the features of a segment spanning
// cycles s..e equal to the rising edges the signals made in cycles
// s-1..e-1; the model uses exactly that alignment.

localparam int TM_NF = NF, TM_CNT_W = CW, TM_AW = AW, TM_RES_W = 16;
`include "tree_model.svh"
localparam int CL_W = (K > 1) ? $clog2(K) : 1;

logic clk = 1'b0, rst_n = 1'b0;
logic [NF-1:0] mon_sig;
logic [SW-1:0] state;
logic inv_done;
logic cfg_tree_we, cfg_lut_we;
logic [CL_W-1:0] cfg_tree_learner, cfg_lut_cluster;
logic [AW-1:0] cfg_tree_addr;
logic [TM_NODE_W-1:0] cfg_tree_data;
logic [SW-1:0] cfg_lut_state;
logic power_valid, overflow;
logic [15:0] power;

int checks = 0, failures = 0;
event run_done;   // the including testbench reports and finishes on it
tm_node_t trees [K][2**AW];
int lut [2**SW];
int act_rate [2**SW];
longint unsigned exp_q [$];
bit comparing = 1;

// Mechanism counters.
int n_pow = 0, n_seg = 0, n_split = 0, n_tree = 0, n_fsm_stall = 0, n_marker = 0;
int n_align = 0, n_stall = 0, n_inv = 0, n_ovf = 0;

always #5 clk = ~clk;

task automatic check(input bit ok, input string what);
  checks++;
  if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
endtask

// ---------------------------------------------------------------- model
logic [NF-1:0] sig_prev;
logic [NF-1:0][CW-1:0] cum0, cum1, cum2;     // cumulative edges up to cycle c, c-1, c-2
logic [NF-1:0][CW-1:0] start_cnt;
logic [SW-1:0] prev_state;
bit prev_inv, model_first;
int seg_len;
longint unsigned tot_cyc, wsum;

task automatic model_reset();
  sig_prev = '0; cum0 = '0; cum1 = '0; cum2 = '0;
  prev_state = '0; prev_inv = 0; model_first = 1; seg_len = 0; tot_cyc = 0; wsum = 0;
endtask

// Called once per cycle with that cycle's inputs, before the clock edge.
task automatic model_step();
  logic [NF-1:0][CW-1:0] cnt_now;
  // Counter value the feature generator sees this cycle: edges up to c-2.
  cnt_now = cum1;
  if (model_first) begin
    model_first = 0; start_cnt = cnt_now; seg_len = 1; tot_cyc = 1;
  end else if (state != prev_state || prev_inv || seg_len == (2**CW) - 1) begin
    logic [NF-1:0][CW-1:0] f;
    logic [15:0] y;
    int nodes;
    // The counter values seen this cycle include edges up to c-2; the
    // segment's features are the edges of cycles s-1 .. e-1.
    for (int i = 0; i < NF; i++) f[i] = cnt_now[i] - start_cnt[i];
    foreach (tm_img[a]) tm_img[a] = trees[lut[prev_state]][a];
    tm_eval(f, y, nodes);
    wsum += longint'(seg_len) * longint'(y);
    if (prev_inv) begin
      longint unsigned p;
      p = wsum / tot_cyc;
      exp_q.push_back(p > 65535 ? 65535 : p);
      wsum = 0;
    end
    start_cnt = cnt_now; seg_len = 1;
    tot_cyc = prev_inv ? 1 : tot_cyc + 1;
  end else begin
    seg_len++; tot_cyc++;
  end
  prev_state = state; prev_inv = inv_done;
  // Edge bookkeeping for this cycle's signal values.
  cum2 = cum1; cum1 = cum0;
  for (int i = 0; i < NF; i++) if (mon_sig[i] && !sig_prev[i]) cum0[i] = cum0[i] + 1'b1;
  sig_prev = mon_sig;
endtask

// One application cycle: drive inputs for the next clock edge.
task automatic app_cycle(input logic [SW-1:0] st, input bit done);
  @(negedge clk);
  state = st; inv_done = done;
  for (int i = 0; i < NF; i++)
    if ($urandom_range(0, 99) < act_rate[st]) mon_sig[i] = ~mon_sig[i];
  model_step();
endtask

// A state visit of len cycles; the invocation ends on its last cycle if done.
task automatic visit(input logic [SW-1:0] st, input int len, input bit done);
  for (int c = 0; c < len; c++) app_cycle(st, done && (c == len - 1));
  if (done) n_inv++;
endtask

// ---------------------------------------------------------------- monitors
always @(negedge clk) begin
  if (rst_n) begin
    if (dut.seg_valid) n_seg++;
    if (dut.seg_split) n_split++;
    if (|dut.learner_stall) n_stall++;
    if (|dut.u_ecu.bl_res_valid && !(&dut.u_ecu.bl_res_valid)) n_align++;
    for (int i = 0; i < K; i++) if (dut.u_ecu.bl_wr[i] && !dut.learner_en[i]) n_marker++;
    if (power_valid && comparing) begin
      n_pow++;
      if (exp_q.size() == 0) check(0, "unexpected power output");
      else begin
        longint unsigned e;
        e = exp_q.pop_front();
        check(power == 16'(e), $sformatf("invocation %0d: power %0d exp %0d", n_pow, power, e));
      end
    end
  end
end

// End-to-end latency: clock edges from the edge that takes inv_done to the
// edge that raises power_valid. It is measured only when one invocation is
// outstanding, so the minimum is the latency of an idle monitor.
longint unsigned cyc = 0;
longint unsigned inv_t [$];
int lat_min = 1 << 30, lat_max = 0, n_lat = 0;
always @(posedge clk) begin
  cyc <= cyc + 1;
  if (!rst_n) inv_t.delete();
  else begin
    if (power_valid && inv_t.size() > 0) begin
      if (inv_t.size() == 1) begin
        int l;
        l = int'(cyc - inv_t[0] - 1);
        n_lat++;
        if (l < lat_min) lat_min = l;
        if (l > lat_max) lat_max = l;
      end
      void'(inv_t.pop_front());
    end
    if (inv_done) inv_t.push_back(cyc);
  end
end

for (genvar g = 0; g < K; g++) begin : g_mon
  always @(negedge clk) begin
    if (rst_n && dut.u_ecu.g_bl[g].u_bl.eng_done) n_tree++;
    if (rst_n && dut.u_ecu.g_bl[g].u_bl.u_tree.fsm_state == pm_pkg::DT_STALL) n_fsm_stall++;
  end
end

initial begin
  #(64'd400000000);
  failures++;
  $display("watchdog expired");
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
end

// ---------------------------------------------------------------- stimulus
// Size of the trained model in use: learners that own states, monitored
// signals that toggle (the rest stay low), states the application visits.
int k_used = K, f_used = NF, s_used = 2**SW;

// One complete run with a fresh model: reset, load k_used random trees,
// reset again, load the state table, then phases A to C.
task automatic run_workload(input int n_inv_run);
  int states_of [K][$];
  int pow0, inv0;
  comparing = 0;
  mon_sig = '0; state = '0; inv_done = 0;
  cfg_tree_we = 0; cfg_lut_we = 0; cfg_tree_learner = '0; cfg_lut_cluster = '0;
  cfg_tree_addr = '0; cfg_tree_data = '0; cfg_lut_state = '0;
  rst_n = 0;
  repeat (3) @(posedge clk);
  rst_n = 1;
  // Trained model stand-in: random trees, learner 0 the deepest.
  tm_nf_used = f_used;
  for (int k = 0; k < k_used; k++) begin
    tm_new_tree((k == 0) ? TREE_DEPTH : 3 + (k % (TREE_DEPTH - 2)), 40);
    foreach (tm_img[a]) trees[k][a] = tm_img[a];
    for (int a = 0; a < tm_next_free; a++) begin
      @(negedge clk);
      cfg_tree_we = 1; cfg_tree_learner = CL_W'(k); cfg_tree_addr = AW'(a); cfg_tree_data = tm_img[a];
    end
  end
  @(negedge clk); cfg_tree_we = 0;
  // Reset again: the tree memories keep their contents, everything else
  // starts clean; then load the state-to-cluster table.
  rst_n = 0;
  repeat (2) @(negedge clk);
  rst_n = 1;
  exp_q.delete();
  comparing = 1;
  pow0 = n_pow; inv0 = n_inv;
  // The coming clock edge is the monitor's first cycle after reset.
  model_reset();
  model_step();
  for (int s = 0; s < 2**SW; s++) begin
    lut[s] = (s < k_used) ? s : (s < s_used) ? $urandom_range(0, k_used - 1) : 0;
    act_rate[s] = $urandom_range(5, 60);
    if (s < s_used) states_of[lut[s]].push_back(s);
  end
  for (int s = 0; s < 2**SW; s++) begin
    // The application idles in state 0 while the table is loaded.
    cfg_lut_we = 1; cfg_lut_state = SW'(s); cfg_lut_cluster = CL_W'(lut[s]);
    app_cycle('0, 1'b0);
  end
  cfg_lut_we = 0;
  // Phase A: ordinary invocations.
  for (int inv = 0; inv < n_inv_run; inv++) begin
    int n;
    n = $urandom_range(1, 8);
    for (int v = 0; v < n; v++) begin
      int len;
      len = (DO_SPLIT && $urandom_range(0, 9) == 0) ? $urandom_range(2**CW, 2**CW + 150) : $urandom_range(6, 40);
      visit(SW'($urandom_range(0, s_used - 1)), len, v == n - 1);
    end
  end
  if (DO_STRESS) begin
    // Phase B: learner 0 gets two one-cycle visits per invocation and lags
    // behind; the others fill their result FIFOs and must stall.
    for (int inv = 0; inv < RD + 1; inv++) begin
      visit(SW'(states_of[0][0]), 1, 0);
      visit(SW'(states_of[1][0]), 1, 0);
      visit(SW'(states_of[0][0]), 1, 0);
      visit(SW'(states_of[1][0]), 1, 1);
    end
    visit(SW'(states_of[1][0]), 200, 1);
    repeat (2000) app_cycle(SW'(states_of[1][0]), 0);
    visit(SW'(states_of[1][0]), 1, 1);
  end
  repeat (3000) app_cycle(SW'(states_of[1][0]), 0);
  check(exp_q.size() == 0, $sformatf("%0d estimates missing", exp_q.size()));
  check(!overflow, "no overflow before the overflow phase");
  check(n_pow - pow0 == n_inv - inv0, $sformatf("%0d estimates for %0d invocations", n_pow - pow0, n_inv - inv0));
  if (DO_STRESS) begin
    // Phase C: a burst of one-cycle visits overflows learner 0's feature FIFO.
    comparing = 0;
    for (int v = 0; v < 4 * FD; v++) visit(SW'(states_of[v % 2][0]), 1, 0);
    visit(SW'(states_of[1][0]), 1, 0);
    repeat (5) app_cycle(SW'(states_of[1][0]), 0);
    check(overflow, "feature FIFO overflow flagged");
    if (overflow) n_ovf++;
  end
endtask

initial begin
  if (WL_SWEEP) begin
    // Model sizes of the evaluated benchmarks: learners at the optimal
    // point and monitored signals per benchmark, with twice as many
    // states as learners.
    string wl_name [11] = '{"Atax", "Bicg", "Bbgemm", "Gemver", "Gemmncubed", "Matrixmult",
                            "JPGizigzag", "JPGshift", "Symm", "Syr2k", "Doitgen"};
    int wl_k [11] = '{24, 21, 32, 45, 43, 60, 60, 25, 35, 34, 64};
    int wl_f [11] = '{10, 10, 30, 20, 20, 10, 20, 20, 20, 20, 20};
    for (int w = 0; w < 11; w++) begin
      int f0;
      f0 = failures;
      k_used = (wl_k[w] < K) ? wl_k[w] : K;
      f_used = (wl_f[w] < NF) ? wl_f[w] : NF;
      s_used = (2 * k_used < 2**SW) ? 2 * k_used : 2**SW;
      run_workload(N_INV);
      $display("workload %s: %0d learners, %0d features, %0d states: %0d failures",
               wl_name[w], k_used, f_used, s_used, failures - f0);
    end
  end else begin
    run_workload(N_INV);
  end
  // Every mechanism must have happened.
  $display("mechanisms: invocations=%0d segments=%0d trees=%0d fsm_stall_cycles=%0d split=%0d marker_only=%0d out_of_order=%0d result_fifo_stall=%0d overflow=%0d",
           n_inv, n_seg, n_tree, n_fsm_stall, n_split, n_marker, n_align, n_stall, n_ovf);
  $display("latency from inv_done to power_valid, idle monitor: min=%0d max=%0d over %0d invocations",
           lat_min, lat_max, n_lat);
  check(n_lat > 0, "latency measured");
  check(lat_min >= 17 && lat_min <= 2 * (TREE_DEPTH + 1) + 1 + 17 + 12,
        $sformatf("idle latency %0d outside 17..%0d", lat_min, 2 * (TREE_DEPTH + 1) + 1 + 17 + 12));
  check(n_inv > 0 && n_seg > n_inv, "segments and invocations");
  check(n_tree > 0, "tree estimations");
  check(n_fsm_stall > 0, "tree FSM stall state");
  check(n_marker > 0, "end marker to an idle learner");
  check(n_align > 0, "learners completing out of step (result FIFO alignment)");
  check(n_split > 0 || !DO_SPLIT, "long state visit split");
  check(n_stall > 0 || !DO_STRESS, "result FIFO back-pressure");
  -> run_done;
end
