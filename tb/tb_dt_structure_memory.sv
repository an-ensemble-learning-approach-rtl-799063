// tb_dt_structure_memory: self-checking test of the tree structure memory.
//
// Fills the whole memory with random words through the write port, reads
// it back in random order and checks the one-cycle synchronous read latency
// (rdata must still show the previous word before the clock edge) and that
// a write does not disturb other addresses.
module tb_dt_structure_memory;
  localparam int W = 44, AW = 9;
  logic clk = 1'b0;
  logic [AW-1:0] raddr, waddr;
  logic [W-1:0]  rdata, wdata;
  logic          we;
  logic [W-1:0]  model [2**AW];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  dt_structure_memory #(.NODE_W(W), .NODE_AW(AW)) dut (.*);

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
    logic [W-1:0] prev;
    we = 0; raddr = '0; waddr = '0; wdata = '0;
    for (int a = 0; a < 2**AW; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = {$urandom, $urandom};
      model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 2000; i++) begin
      int a;
      a = $urandom_range(0, 2**AW - 1);
      @(negedge clk);
      prev = rdata;
      raddr = AW'(a);
      // Random write to another address in the same cycle.
      we = ($urandom_range(0, 3) == 0);
      waddr = AW'((a + 1 + $urandom_range(0, 2**AW - 2)) % (2**AW));
      wdata = {$urandom, $urandom};
      #1;
      check(rdata == prev, "read is synchronous");
      @(posedge clk);
      if (we) model[waddr] = wdata;
      #1;
      check(rdata == model[a], $sformatf("read addr %0d", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
