// tb_weighted_aggregation: self-checking test of the cycle-weighted sum.
//
// Feeds random invocations of random terms (tree output y, segment length
// t, some entries without a tree output) and checks that each invocation
// end produces sum(t * y) over exactly that invocation's terms, computed in
// the testbench, and that the sum restarts from zero afterwards.  Includes
// full-scale terms (t = 2**20-1, y = 2**16-1) to check the width.
module tb_weighted_aggregation;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_has_y, in_last, out_valid;
  logic [15:0] in_y;
  logic [19:0] in_t;
  logic [47:0] out_p;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  weighted_aggregation #(.RES_W(16), .CYC_W(20), .ACC_W(48)) dut (.*);

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
    longint unsigned sum;
    in_valid = 0; in_has_y = 0; in_last = 0; in_y = '0; in_t = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int inv = 0; inv < 300; inv++) begin
      int n;
      n = $urandom_range(0, 12);
      sum = 0;
      for (int k = 0; k <= n; k++) begin
        @(negedge clk);
        in_valid = 1;
        in_has_y = (k < n) ? 1'b1 : 1'($urandom_range(0, 1));
        in_y = (inv % 25 == 0) ? 16'hFFFF : 16'($urandom);
        in_t = (inv % 25 == 0) ? 20'hFFFFF : 20'($urandom_range(1, 5000));
        in_last = (k == n);
        if (in_has_y) sum += longint'(in_t) * longint'(in_y);
        #1;
        check(out_valid == in_last, "out_valid only on last");
        if (in_last) check(out_p == 48'(sum), $sformatf("inv %0d p %0d exp %0d", inv, out_p, sum));
        // Random idle cycles in between.
        if ($urandom_range(0, 2) == 0) begin
          @(negedge clk); in_valid = 0; in_last = 0;
        end
      end
      @(negedge clk); in_valid = 0; in_last = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
