// tb_sync_fifo: self-checking test of the first-word-fall-through FIFO.
//
// Random pushes and pops against a queue model: checks the head word, the
// empty/full flags and the occupancy on every cycle, that a push into a full
// FIFO is dropped and flagged as overflow, and simultaneous push and pop.
module tb_sync_fifo;
  localparam int W = 12, D = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en, rd_en, full, empty, overflow;
  logic [W-1:0] wr_data, rd_data;
  logic [$clog2(D):0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];
  int n_ovf = 0, n_full = 0;

  always #5 clk = ~clk;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      // Compare visible state with the model.
      check(empty == (model.size() == 0), $sformatf("empty flag cyc %0d", cyc));
      check(full == (model.size() == D), $sformatf("full flag cyc %0d", cyc));
      check(int'(count) == model.size(), $sformatf("count cyc %0d", cyc));
      if (model.size() > 0) check(rd_data == model[0], $sformatf("head cyc %0d: %h exp %h", cyc, rd_data, model[0]));
      if (full) n_full++;
      // Phases: fill-biased, drain-biased, balanced.
      begin
        int pw, pr;
        pw = 0; pr = 0;
        case ((cyc / 300) % 3)
          0: begin pw = 80; pr = 30; end
          1: begin pw = 30; pr = 80; end
          default: begin pw = 60; pr = 60; end
        endcase
        wr_en   = ($urandom_range(0, 99) < pw);
        rd_en   = ($urandom_range(0, 99) < pr) && (model.size() > 0) && !empty;
        wr_data = W'($urandom);
      end
      #1;
      check(overflow == (wr_en && model.size() == D), "overflow flag");
      if (overflow) n_ovf++;
      begin
        bit was_full;
        was_full = (model.size() == D);
        @(posedge clk);
        if (rd_en) void'(model.pop_front());
        if (wr_en && !was_full) model.push_back(wr_data);
      end
    end
    check(n_ovf > 0 && n_full > 0, "full and overflow exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
