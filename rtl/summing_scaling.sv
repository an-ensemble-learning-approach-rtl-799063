// summing_scaling: forms the invocation-level power estimate
//   P_ens = (1/T) * sum_i p(c_i).
//
// When every base learner's result FIFO and the invocation-length FIFO hold
// an entry, the unit pops them all in one cycle, adds the K weighted sums
// and divides the total by T, the invocation's length in cycles.  The
// quotient is the cycle-weighted mean of the per-segment tree outputs, in
// the same power units as the leaves, so it is below 2**RES_W whenever T is
// the sum of the segment lengths.  The divider therefore only computes
// RES_W quotient bits: a restoring divider, one bit per cycle, whose partial
// remainder starts as the dividend's high bits (sum >> RES_W).  If those are
// not below T the quotient would not fit and the output saturates; a zero T
// gives 0.  The result appears on power with power_valid high for one cycle.
//
// Timing: RES_W + 1 = 17 cycles from the pop to power_valid; one invocation
// in flight at a time, further results wait in the FIFOs.  Summing and
// scaling by T follow the paper; the adder tree, the short bit-serial
// divider and the saturation are this design's choices.
module summing_scaling #(
  parameter int unsigned NUM_LEARNERS = 64,
  parameter int unsigned ACC_W        = pm_pkg::ACC_W,
  parameter int unsigned T_W          = pm_pkg::T_W,
  parameter int unsigned RES_W        = pm_pkg::RES_W,
  localparam int unsigned SUM_W       = ACC_W + ((NUM_LEARNERS > 1) ? $clog2(NUM_LEARNERS) : 1)
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic [NUM_LEARNERS-1:0]             res_valid,
  input  logic [NUM_LEARNERS-1:0][ACC_W-1:0]  res_data,
  output logic                                res_pop,
  input  logic                                t_valid,
  input  logic [T_W-1:0]                      t_data,
  output logic                                power_valid,
  output logic [RES_W-1:0]                    power
);

  localparam int unsigned CNT_BITS = $clog2(RES_W + 1);
  localparam int unsigned HI_W     = SUM_W - RES_W;
  localparam int unsigned CMP_W    = (HI_W > T_W) ? HI_W : T_W;

  logic                busy_q;
  logic [CNT_BITS-1:0] step_q;
  logic [RES_W-1:0]    quo_q;      // low dividend bits shifting out, quotient shifting in
  logic [T_W:0]        rem_q;
  logic [T_W-1:0]      div_q;
  logic                sat_q, zero_q;
  logic [SUM_W-1:0]    sum;
  logic [HI_W-1:0]     sum_hi;
  logic [T_W:0]        rem_sh, rem_sub;

  always_comb begin
    sum = '0;
    for (int i = 0; i < NUM_LEARNERS; i++) sum += SUM_W'(res_data[i]);
  end

  // The quotient fits in RES_W bits exactly when sum / 2**RES_W < T.
  assign sum_hi  = sum[SUM_W-1:RES_W];

  assign res_pop = !busy_q && (&res_valid) && t_valid;

  assign rem_sh  = {rem_q[T_W-1:0], quo_q[RES_W-1]};
  assign rem_sub = rem_sh - {1'b0, div_q};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q      <= 1'b0;
      step_q      <= '0;
      quo_q       <= '0;
      rem_q       <= '0;
      div_q       <= '0;
      sat_q       <= 1'b0;
      zero_q      <= 1'b0;
      power_valid <= 1'b0;
      power       <= '0;
    end else begin
      power_valid <= 1'b0;
      if (res_pop) begin
        busy_q <= 1'b1;
        step_q <= CNT_BITS'(RES_W);
        quo_q  <= sum[RES_W-1:0];
        // The partial remainder starts as the high dividend bits; it is
        // below T unless the result saturates, which is handled apart.
        rem_q  <= (T_W+1)'(sum_hi);
        div_q  <= t_data;
        zero_q <= (t_data == '0);
        sat_q  <= (CMP_W'(sum_hi) >= CMP_W'(t_data));
      end else if (busy_q) begin
        if (step_q != 0) begin
          // One restoring division step.
          step_q <= step_q - 1'b1;
          if (!rem_sub[T_W]) begin
            rem_q <= rem_sub;
            quo_q <= {quo_q[RES_W-2:0], 1'b1};
          end else begin
            rem_q <= rem_sh;
            quo_q <= {quo_q[RES_W-2:0], 1'b0};
          end
        end else begin
          busy_q      <= 1'b0;
          power_valid <= 1'b1;
          if (zero_q)     power <= '0;
          else if (sat_q) power <= '1;
          else            power <= quo_q;
        end
      end
    end
  end

endmodule
