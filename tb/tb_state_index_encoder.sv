// tb_state_index_encoder: self-checking test of the one-hot to index encoder.
//
// Applies every one-hot code at STATE_W = 4 and at the default STATE_W = 8
// and checks the index against the bit position, the all-zero input (index
// 0, valid low) and some random multi-bit inputs (index = OR of positions).
module tb_state_index_encoder;
  logic [15:0]  oh4;
  logic [3:0]   idx4;
  logic         v4;
  logic [255:0] oh8;
  logic [7:0]   idx8;
  logic         v8;
  int checks = 0, failures = 0;

  state_index_encoder #(.STATE_W(4)) dut4 (.onehot(oh4), .index(idx4), .valid(v4));
  state_index_encoder dut8 (.onehot(oh8), .index(idx8), .valid(v8));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    oh4 = '0; oh8 = '0;
    #1;
    check(idx4 == 0 && !v4, "zero input, width 4");
    check(idx8 == 0 && !v8, "zero input, width 8");
    for (int i = 0; i < 16; i++) begin
      oh4 = 16'(1) << i;
      #1;
      check(idx4 == 4'(i) && v4, $sformatf("one-hot bit %0d, width 4: got %0d", i, idx4));
    end
    for (int i = 0; i < 256; i++) begin
      oh8 = 256'(1) << i;
      #1;
      check(idx8 == 8'(i) && v8, $sformatf("one-hot bit %0d, width 8: got %0d", i, idx8));
    end
    for (int n = 0; n < 200; n++) begin
      int a, b;
      a = $urandom_range(0, 255);
      b = $urandom_range(0, 255);
      oh8 = (256'(1) << a) | (256'(1) << b);
      #1;
      check(idx8 == 8'(a | b) && v8, $sformatf("two bits %0d,%0d", a, b));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
