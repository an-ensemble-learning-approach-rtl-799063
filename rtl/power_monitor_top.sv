// power_monitor_top: in-situ ensemble monitor of an FPGA application's
// dynamic power.
//
// Placed next to an FSMD-style application (a controller FSM driving a
// datapath), it watches NUM_FEAT selected single-bit signals and the
// controller's state register.  Activity counters count the signals' rising
// edges; the feature generator turns the counts into per-state-visit
// features; the cluster lookup table sends each visit to the base learner
// of its state's cluster; each learner's decision tree estimates the power
// of the visit, weighted by its length; at the end of every invocation the
// weighted results are summed and divided by the invocation length, giving
// the average dynamic power of the invocation on power / power_valid.
//
// Interface:
//   mon_sig        the monitored signals (synchronous to clk)
//   state          the application's state register: a binary index of
//                  STATE_W bits, or with STATE_ONEHOT = 1 a one-hot register
//                  of 2**STATE_W bits, converted by state_index_encoder
//   inv_done       high in the last cycle of each invocation
//   cfg_tree_*     load node words into the tree memory of one learner
//   cfg_lut_*      load the state-to-cluster table
//   power_valid    one-cycle strobe with the invocation's estimate on power
//   overflow       sticky: a state visit was lost because a FIFO was full
// The trees and the table come from offline training and must be loaded
// after reset, before the application starts.  Timing: the estimate of an
// invocation appears once the last learner has finished its trees, plus the
// division (RES_W + 1 = 17 cycles).
//
// Block structure, 20-bit counters and the up-to-64-learner ensemble follow
// the paper; 30 features (the most any evaluated benchmark needs) and a tree
// memory of 512 nodes (a full tree of the largest searched depth, 8) are
// taken from the paper's evaluated settings.  FIFO depths, port widths and
// the binary state index (default; one-hot as drawn in the paper's figure is
// available through STATE_ONEHOT) are this design's choices.
module power_monitor_top #(
  parameter int unsigned NUM_FEAT     = 30,
  parameter int unsigned NUM_LEARNERS = 64,
  parameter int unsigned CNT_W        = pm_pkg::CNT_W,
  parameter int unsigned STATE_W      = pm_pkg::STATE_W,
  parameter int unsigned NODE_AW      = 9,
  parameter int unsigned FEAT_DEPTH   = 16,
  parameter int unsigned RES_DEPTH    = 4,
  parameter bit          STATE_ONEHOT = 1'b0,
  localparam int unsigned STATE_IN_W  = STATE_ONEHOT ? 2**STATE_W : STATE_W,
  localparam int unsigned RES_W       = pm_pkg::RES_W,
  localparam int unsigned ACC_W       = pm_pkg::ACC_W,
  localparam int unsigned T_W         = pm_pkg::T_W,
  localparam int unsigned CL_W        = (NUM_LEARNERS > 1) ? $clog2(NUM_LEARNERS) : 1,
  localparam int unsigned FEAT_AW     = (NUM_FEAT > 1) ? $clog2(NUM_FEAT) : 1,
  localparam int unsigned NODE_W      = 1 + CNT_W + 2*NODE_AW + FEAT_AW
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NUM_FEAT-1:0]  mon_sig,
  input  logic [STATE_IN_W-1:0] state,
  input  logic                 inv_done,
  input  logic                 cfg_tree_we,
  input  logic [CL_W-1:0]      cfg_tree_learner,
  input  logic [NODE_AW-1:0]   cfg_tree_addr,
  input  logic [NODE_W-1:0]    cfg_tree_data,
  input  logic                 cfg_lut_we,
  input  logic [STATE_W-1:0]   cfg_lut_state,
  input  logic [CL_W-1:0]      cfg_lut_cluster,
  output logic                 power_valid,
  output logic [RES_W-1:0]     power,
  output logic                 overflow
);

  // Activity counters.
  logic [NUM_FEAT-1:0][CNT_W-1:0] act_cnt;

  for (genvar f = 0; f < NUM_FEAT; f++) begin : g_act
    activity_counter #(.CNT_W(CNT_W)) u_act (
      .clk, .rst_n, .clr(1'b0), .sig(mon_sig[f]), .count(act_cnt[f])
    );
  end

  // State register: binary index, or one-hot converted to an index.
  logic [STATE_W-1:0] state_idx;

  if (STATE_ONEHOT) begin : g_onehot
    logic state_ok;
    state_index_encoder #(.STATE_W(STATE_W)) u_enc (
      .onehot(state), .index(state_idx), .valid(state_ok)
    );
    // An HLS controller holds exactly one state bit high once out of reset.
    a_onehot : assert property (@(posedge clk) disable iff (!rst_n) state_ok)
      else $error("power_monitor_top: one-hot state register is all zero");
  end else begin : g_binary
    assign state_idx = state;
  end

  // Feature generator.
  logic                           seg_valid, seg_inv_end, seg_split;
  logic [STATE_W-1:0]             seg_state;
  logic [CNT_W-1:0]               seg_cycles;
  logic [NUM_FEAT-1:0][CNT_W-1:0] seg_feat;
  logic [T_W-1:0]                 seg_total;

  feature_generator #(
    .NUM_FEAT(NUM_FEAT), .CNT_W(CNT_W), .STATE_W(STATE_W), .T_W(T_W)
  ) u_fg (
    .clk, .rst_n, .act_cnt, .state(state_idx), .inv_done,
    .seg_valid, .seg_state, .seg_cycles, .seg_feat,
    .seg_inv_end, .seg_total, .seg_split
  );

  // Cluster lookup table.
  logic [CL_W-1:0]         seg_cluster;
  logic [NUM_LEARNERS-1:0] learner_en;

  cluster_lut #(.NUM_LEARNERS(NUM_LEARNERS), .STATE_W(STATE_W)) u_lut (
    .clk, .rst_n,
    .cfg_we(cfg_lut_we), .cfg_state(cfg_lut_state), .cfg_cluster(cfg_lut_cluster),
    .seg_valid, .seg_state, .cluster(seg_cluster), .learner_en
  );

  // Ensemble control unit.
  logic [NUM_LEARNERS-1:0] learner_stall;

  ensemble_control_unit #(
    .NUM_LEARNERS(NUM_LEARNERS), .NUM_FEAT(NUM_FEAT), .CNT_W(CNT_W),
    .RES_W(RES_W), .ACC_W(ACC_W), .T_W(T_W), .NODE_AW(NODE_AW),
    .FEAT_DEPTH(FEAT_DEPTH), .RES_DEPTH(RES_DEPTH)
  ) u_ecu (
    .clk, .rst_n,
    .seg_valid, .learner_en, .seg_cycles, .seg_feat, .seg_inv_end, .seg_total,
    .cfg_we(cfg_tree_we), .cfg_learner(cfg_tree_learner),
    .cfg_addr(cfg_tree_addr), .cfg_data(cfg_tree_data),
    .power_valid, .power, .overflow, .learner_stall
  );

endmodule
