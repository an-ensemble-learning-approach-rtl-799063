// activity_counter: counts the rising edges of one monitored signal.
//
// A two-flop positive edge detector registers the signal twice; the edge
// pulse (first flop high, second flop low) lasts one cycle and enables an
// up-counter.  The counter wraps modulo 2**CNT_W: the feature generator only
// ever takes differences of two readings, so wrap-around is harmless as long
// as fewer than 2**CNT_W cycles separate the two readings.
//
// Interface: sig is the monitored single-bit signal (assumed synchronous to
// clk), clr a synchronous clear (the counter "Rst" pin), count the running
// total.  Timing: an edge of sig between cycles c-1 and c is seen in count
// from cycle c+2 on (two detector flops plus the counter register).
//
// The edge detector and the 20-bit width follow the paper; the synchronous
// clear and active-low reset are this design's choice.
module activity_counter #(
  parameter int unsigned CNT_W = pm_pkg::CNT_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             sig,
  output logic [CNT_W-1:0] count
);

  logic sig_q1, sig_q2;
  logic edge_en;

  // Positive edge detector.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sig_q1 <= 1'b0;
      sig_q2 <= 1'b0;
    end else begin
      sig_q1 <= sig;
      sig_q2 <= sig_q1;
    end
  end

  assign edge_en = sig_q1 & ~sig_q2;

  // Counter enabled by the edge pulse.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       count <= '0;
    else if (clr)     count <= '0;
    else if (edge_en) count <= count + 1'b1;
  end

endmodule
