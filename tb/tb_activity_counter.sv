// tb_activity_counter: self-checking test of the rising-edge activity counter.
//
// Drives random waveforms on two counters (full 20-bit width and a 4-bit one
// that must wrap), counts the rising edges of the stimulus independently and
// compares after the pipeline has drained.  Also checks the two-cycle edge
// latency of the detector, that a held-high or falling signal does not count,
// and the synchronous clear.
module tb_activity_counter;
  logic clk = 1'b0, rst_n = 1'b0;
  logic clr, sig;
  logic [19:0] count;
  logic [3:0]  count4;
  int checks = 0, failures = 0;
  int unsigned edges;
  logic prev;

  always #5 clk = ~clk;

  activity_counter #(.CNT_W(20)) dut (.clk, .rst_n, .clr, .sig, .count);
  activity_counter #(.CNT_W(4))  dut4 (.clk, .rst_n, .clr, .sig, .count(count4));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Apply one value of sig for one cycle and count rising edges of the stimulus.
  task automatic drive(input logic v);
    @(negedge clk);
    if (v && !prev) edges++;
    prev = v;
    sig  = v;
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clr = 0; sig = 0; prev = 0; edges = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Single edge: visible exactly two cycles after the edge cycle.
    drive(1);               // sig rises before posedge k
    @(posedge clk); #1;     // posedge k: first flop takes 1
    check(count == 0, "no count one cycle after edge");
    @(posedge clk); #1;     // posedge k+1: counter enabled at k+1 -> visible
    check(count == 1, "count after two cycles");
    // Holding high must not count again.
    repeat (5) drive(1);
    drive(0); drive(0);
    repeat (3) @(posedge clk); #1;
    check(count == 1, "held-high / falling edge not counted");
    // Random bursts.
    for (int b = 0; b < 20; b++) begin
      repeat (50 + $urandom_range(0, 100)) drive(1'($urandom_range(0, 1)));
      drive(0);
      repeat (3) @(posedge clk); #1;
      check(count == 20'(edges), $sformatf("burst %0d: count %0d exp %0d", b, count, edges));
      check(count4 == 4'(edges), $sformatf("burst %0d: 4-bit wrap count %0d exp %0d", b, count4, 4'(edges)));
    end
    // Synchronous clear.
    @(negedge clk); clr = 1;
    @(negedge clk); clr = 0;
    check(count == 0 && count4 == 0, "clear");
    edges = 0;
    repeat (40) drive(1'($urandom_range(0, 1)));
    drive(0);
    repeat (3) @(posedge clk); #1;
    check(count == 20'(edges), "count after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
