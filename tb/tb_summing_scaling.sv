// tb_summing_scaling: self-checking test of the summing and scaling unit.
//
// With the default 64 learners, presents result FIFO heads that become
// valid one learner at a time, checks that nothing is popped until all 64
// and the invocation length T are present, then checks the estimate
// floor(sum / T) (saturated to 16 bits, 0 for T = 0) and the latency of
// RES_W + 1 = 17 cycles from the pop to power_valid.
module tb_summing_scaling;
  localparam int K = 64, AW = 48, TW = 32, RW = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [K-1:0] res_valid;
  logic [K-1:0][AW-1:0] res_data;
  logic res_pop, t_valid, power_valid;
  logic [TW-1:0] t_data;
  logic [RW-1:0] power;
  int checks = 0, failures = 0;
  int n_sat = 0;

  always #5 clk = ~clk;

  summing_scaling #(.NUM_LEARNERS(K), .ACC_W(AW), .T_W(TW), .RES_W(RW)) dut (.*);

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

  initial begin
    res_valid = '0; res_data = '0; t_valid = 0; t_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int inv = 0; inv < 60; inv++) begin
      longint unsigned T, sum, exp_p;
      int lat;
      // Invocation length and per-learner weighted sums consistent with
      // per-segment power values below 2**16 (sum <= T * 65535).
      T = (inv == 5) ? 0 : $urandom_range(1, 200000);
      sum = 0;
      for (int i = 0; i < K; i++) begin
        longint unsigned share;
        share = (inv % 7 == 3) ? longint'($urandom) * 4000 : longint'($urandom_range(0, 65535)) * (T / K + 1);
        res_data[i] = AW'(share);
        sum += share;
      end
      if (inv == 10 || inv == 11) begin
        // Edges of the output range: the largest quotient that fits, and
        // the smallest that saturates.
        sum = (inv == 10) ? T * 65536 - 1 : T * 65536;
        res_data = '0;
        res_data[inv % K] = AW'(sum);
      end
      exp_p = (T == 0) ? 0 : ((sum / T > 65535) ? 65535 : sum / T);
      if (T != 0 && sum / T > 65535) n_sat++;
      @(negedge clk);
      t_data = TW'(T); t_valid = 1;
      // Learners finish one by one in random order.
      for (int i = 0; i < K; i++) begin
        int j;
        do j = $urandom_range(0, K - 1); while (res_valid[j]);
        res_valid[j] = 1;
        #1;
        check(res_pop == (i == K - 1), $sformatf("pop with %0d of %0d valid", i + 1, K));
        @(negedge clk);
      end
      res_valid = '0; t_valid = 0;
      lat = 0;
      while (!power_valid && lat < 200) begin @(negedge clk); lat++; end
      check(lat == RW + 1, $sformatf("latency %0d exp %0d", lat, RW + 1));
      check(power == RW'(exp_p), $sformatf("inv %0d power %0d exp %0d", inv, power, exp_p));
    end
    check(n_sat > 0, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
