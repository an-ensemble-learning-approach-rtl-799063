// tb_feature_generator: self-checking test of the per-state feature generator.
//
// A random FSM trace (state visits of 1 to 150 cycles, random end-of-
// invocation strobes) and random activity counts drive the generator, here
// with 6-bit counters so that long visits must be split at 63 cycles.  The
// expected segments are derived from the trace: one per state visit, cut at
// invocation ends and at 63 cycles; features are the counter differences
// between the segment's first cycle and the next segment's first cycle.
// Every emitted segment is compared field by field, in order.
module tb_feature_generator;
  localparam int NF = 4, CW = 6, SW = 8, TW = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [NF-1:0][CW-1:0] act_cnt;
  logic [SW-1:0] state;
  logic inv_done;
  logic seg_valid, seg_inv_end, seg_split;
  logic [SW-1:0] seg_state;
  logic [CW-1:0] seg_cycles;
  logic [NF-1:0][CW-1:0] seg_feat;
  logic [TW-1:0] seg_total;
  int checks = 0, failures = 0;

  typedef struct {
    logic [SW-1:0] st;
    int            cyc;
    logic [NF-1:0][CW-1:0] f;
    bit            inv_end;
    int            total;
  } seg_t;
  seg_t exp_q [$];
  int n_split_exp = 0, n_split_seen = 0, n_end = 0, n_seg = 0;

  always #5 clk = ~clk;

  feature_generator #(.NUM_FEAT(NF), .CNT_W(CW), .STATE_W(SW), .T_W(TW)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Compare the DUT's segments with the expected ones.
  always @(negedge clk) begin
    if (rst_n && seg_valid) begin
      seg_t e;
      n_seg++;
      if (seg_split) n_split_seen++;
      if (exp_q.size() == 0) check(0, "unexpected segment");
      else begin
        e = exp_q.pop_front();
        check(seg_state == e.st, $sformatf("seg %0d state %0d exp %0d", n_seg, seg_state, e.st));
        check(int'(seg_cycles) == e.cyc, $sformatf("seg %0d cycles %0d exp %0d", n_seg, seg_cycles, e.cyc));
        check(seg_feat == e.f, $sformatf("seg %0d features", n_seg));
        check(seg_inv_end == e.inv_end, $sformatf("seg %0d inv_end", n_seg));
        if (e.inv_end) check(int'(seg_total) == e.total, $sformatf("seg %0d T %0d exp %0d", n_seg, seg_total, e.total));
      end
    end
  end

  initial begin
    logic [SW-1:0] prev_state;
    bit prev_inv, first;
    int len, tot, remaining;
    logic [NF-1:0][CW-1:0] start_cnt;
    seg_t cur;
    act_cnt = '0; state = '0; inv_done = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    first = 1; remaining = 0; len = 0; tot = 0; prev_inv = 0; prev_state = '0;
    for (int c = 0; c < 20000; c++) begin
      // Stimulus for cycle c.
      if (remaining == 0) begin
        logic [SW-1:0] ns;
        ns = SW'($urandom_range(0, 15));
        if ($urandom_range(0, 3) == 0) ns = state;   // same state again (only an end cuts it)
        state = ns;
        remaining = ($urandom_range(0, 9) == 0) ? $urandom_range(60, 150) : $urandom_range(1, 6);
      end
      remaining--;
      inv_done = (remaining == 0) && ($urandom_range(0, 3) == 0);
      for (int f = 0; f < NF; f++) act_cnt[f] = act_cnt[f] + CW'($urandom_range(0, 1));
      // Model.
      if (first) begin
        first = 0; start_cnt = act_cnt; len = 1; tot = 1;
      end else if (state != prev_state || prev_inv || len == 63) begin
        cur.st = prev_state; cur.cyc = len; cur.inv_end = prev_inv; cur.total = tot;
        for (int f = 0; f < NF; f++) cur.f[f] = act_cnt[f] - start_cnt[f];
        exp_q.push_back(cur);
        if (len == 63 && state == prev_state && !prev_inv) n_split_exp++;
        if (prev_inv) n_end++;
        start_cnt = act_cnt; len = 1;
        tot = prev_inv ? 1 : tot + 1;
      end else begin
        len++; tot++;
      end
      prev_state = state; prev_inv = inv_done;
      @(negedge clk);
    end
    repeat (3) @(negedge clk);
    check(exp_q.size() <= 1, $sformatf("%0d segments missing", exp_q.size()));
    check(n_split_seen == n_split_exp && n_split_exp > 0, $sformatf("splits %0d exp %0d", n_split_seen, n_split_exp));
    check(n_end > 10, "invocation ends exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
