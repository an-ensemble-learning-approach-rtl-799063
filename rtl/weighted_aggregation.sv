// weighted_aggregation: the per-learner cycle-weighted sum p(c_i).
//
// For every state segment its learner estimated, the tree output y is
// multiplied by the segment's length t (cycles) and added to an
// accumulator, so that over one invocation the accumulator holds
//   p(c_i) = sum_j r(s_j, c_i) * t(s_j) * y_i(x_sj).
// An input flagged last closes the invocation: out_valid pulses with the
// final sum (including the last term, if any) and the accumulator restarts
// from zero.  An input without a tree output (in_has_y low) adds nothing and
// is how an invocation end reaches a learner that saw none of its states.
//
// Timing: combinational output, registered accumulator; one term per cycle.
// The weighting follows the paper's equation for p(c_i); the widths and the
// end-of-invocation marker are this design's choices.
module weighted_aggregation #(
  parameter int unsigned RES_W = pm_pkg::RES_W,
  parameter int unsigned CYC_W = pm_pkg::CYC_W,
  parameter int unsigned ACC_W = pm_pkg::ACC_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             in_has_y,
  input  logic [RES_W-1:0] in_y,
  input  logic [CYC_W-1:0] in_t,
  input  logic             in_last,
  output logic             out_valid,
  output logic [ACC_W-1:0] out_p
);

  logic [ACC_W-1:0] acc_q, term, acc_next;

  assign term      = in_has_y ? ACC_W'(in_t) * ACC_W'(in_y) : '0;
  assign acc_next  = acc_q + term;
  assign out_valid = in_valid && in_last;
  assign out_p     = acc_next;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        acc_q <= '0;
    else if (in_valid) acc_q <= in_last ? '0 : acc_next;
  end

endmodule
