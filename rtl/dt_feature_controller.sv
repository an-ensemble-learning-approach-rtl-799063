// dt_feature_controller: feeds one feature at a time to the tree walker.
//
// The feature vector of the state segment being estimated sits at the head
// of the learner's feature FIFO.  The controller starts the tree walker
// (cal_start) when a vector is waiting and the walker is idle, then on every
// cycle selects the feature addressed by act_sel and registers it as
// act_value, so the walker sees the feature one cycle after naming it.  When
// the walker reports done, the controller pops the vector from the FIFO.
//
// The select-and-register structure follows the paper's engine figure.  The
// paper's controller also has a clock counter that delimits fixed sampling
// periods for the single-tree monitor; the ensemble monitor built here is
// driven by state segments instead, so that counter is not included.
module dt_feature_controller #(
  parameter int unsigned NUM_FEAT     = 30,
  parameter int unsigned CNT_W    = pm_pkg::CNT_W,
  localparam int unsigned FEAT_AW = (NUM_FEAT > 1) ? $clog2(NUM_FEAT) : 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           feat_valid,
  input  logic [NUM_FEAT-1:0][CNT_W-1:0] feat,
  output logic                           feat_pop,
  input  logic                           fsm_idle,
  input  logic                           fsm_done,
  input  logic [FEAT_AW-1:0]             act_sel,
  output logic [CNT_W-1:0]               act_value,
  output logic                           cal_start
);

  assign cal_start = feat_valid && fsm_idle;
  assign feat_pop  = fsm_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       act_value <= '0;
    else if (32'(act_sel) < NUM_FEAT) act_value <= feat[act_sel];
    else                              act_value <= '0;
  end

endmodule
