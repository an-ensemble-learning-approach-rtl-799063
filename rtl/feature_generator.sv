// feature_generator: cuts the running activity counts into per-state features.
//
// The application's FSM state is sampled every cycle.  The cycles from one
// state change to the next form a segment.  At the first cycle of a segment
// the generator stores a snapshot of all activity counters; when the segment
// ends (the state changes) it subtracts that snapshot from the current
// counts, which gives the number of rising edges each signal made while the
// state was active, and stores the new snapshot for the next segment.
// The same subtraction yields t(s_j), the number of cycles spent in the
// state, which the weighted aggregation needs.
//
// Two further events close a segment (this design's choice; the paper only
// says that features are formed "during state transition"):
//  * inv_done, the application's end-of-invocation strobe, high in the last
//    cycle of an invocation.  The segment then carries seg_inv_end = 1 and
//    seg_total = T, the invocation's length in cycles.
//  * a segment reaching 2**CNT_W - 1 cycles, so that neither the wrapping
//    activity counters nor the cycle count can overflow (seg_split pulses).
//
// Interface: act_cnt are the activity counter outputs, state the binary state
// index, inv_done the end strobe.  Outputs are registered: seg_valid pulses
// one cycle after the first cycle of the following segment, with the
// finished segment's state, length, features and flags.
module feature_generator #(
  parameter int unsigned NUM_FEAT     = 30,
  parameter int unsigned CNT_W    = pm_pkg::CNT_W,
  parameter int unsigned STATE_W  = pm_pkg::STATE_W,
  parameter int unsigned T_W      = pm_pkg::T_W
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic [NUM_FEAT-1:0][CNT_W-1:0]     act_cnt,
  input  logic [STATE_W-1:0]                 state,
  input  logic                               inv_done,
  output logic                               seg_valid,
  output logic [STATE_W-1:0]                 seg_state,
  output logic [CNT_W-1:0]                   seg_cycles,
  output logic [NUM_FEAT-1:0][CNT_W-1:0]     seg_feat,
  output logic                               seg_inv_end,
  output logic [T_W-1:0]                     seg_total,
  output logic                               seg_split
);

  localparam logic [CNT_W-1:0] CYC_MAX = '1;

  logic                           running;
  logic [STATE_W-1:0]             state_q;
  logic                           inv_done_q;
  logic [NUM_FEAT-1:0][CNT_W-1:0] snap_q;
  logic [CNT_W-1:0]               cyc_q;
  logic [T_W-1:0]                 tcnt_q;
  logic                           close, close_split;

  // The previous segment ends with the previous cycle when the state changed,
  // the previous cycle ended an invocation, or the segment is as long as the
  // cycle count can hold.
  assign close_split = (cyc_q == CYC_MAX);
  assign close       = running && ((state != state_q) || inv_done_q || close_split);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running     <= 1'b0;
      state_q     <= '0;
      inv_done_q  <= 1'b0;
      snap_q      <= '0;
      cyc_q       <= '0;
      tcnt_q      <= '0;
      seg_valid   <= 1'b0;
      seg_state   <= '0;
      seg_cycles  <= '0;
      seg_feat    <= '0;
      seg_inv_end <= 1'b0;
      seg_total   <= '0;
      seg_split   <= 1'b0;
    end else begin
      running    <= 1'b1;
      state_q    <= state;
      inv_done_q <= inv_done;
      seg_valid  <= close;
      seg_split  <= close && close_split && (state == state_q) && !inv_done_q;
      if (!running) begin
        // First cycle after reset opens the first segment.
        snap_q <= act_cnt;
        cyc_q  <= 1;
        tcnt_q <= 1;
      end else if (close) begin
        seg_state   <= state_q;
        seg_cycles  <= cyc_q;
        seg_inv_end <= inv_done_q;
        seg_total   <= tcnt_q;
        for (int i = 0; i < NUM_FEAT; i++) begin
          seg_feat[i] <= act_cnt[i] - snap_q[i];
        end
        snap_q <= act_cnt;
        cyc_q  <= 1;
        tcnt_q <= inv_done_q ? T_W'(1) : tcnt_q + 1'b1;
      end else begin
        cyc_q  <= cyc_q + 1'b1;
        tcnt_q <= tcnt_q + 1'b1;
      end
    end
  end

endmodule
