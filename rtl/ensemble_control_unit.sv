// ensemble_control_unit: the K base learners and the final averaging.
//
// Every finished state segment arrives with a one-hot learner enable from
// the cluster lookup table.  The segment's features and length are written
// into the enabled learner's feature FIFO.  If the segment ends an
// invocation, every other learner also receives an entry, carrying only the
// end marker, and the invocation length T is queued in a separate FIFO.
// Each learner then delivers exactly one weighted sum p(c_i) per invocation
// into its result FIFO, whatever the order in which the learners finish;
// the summing and scaling unit waits for all of them and outputs
// P_ens = sum_i p(c_i) / T.
//
// Interface: seg_* from the feature generator, learner_en from the cluster
// lookup table, cfg_* load the tree of learner cfg_learner.  overflow is a
// sticky flag, cleared only by reset: a feature FIFO or the T FIFO was full
// and a segment was lost, so estimates after it are not trustworthy.
// The structure follows the paper's overview figure; the marker broadcast,
// T FIFO and overflow flag are this design's.
module ensemble_control_unit #(
  parameter int unsigned NUM_LEARNERS = 64,
  parameter int unsigned NUM_FEAT     = 30,
  parameter int unsigned CNT_W        = pm_pkg::CNT_W,
  parameter int unsigned RES_W        = pm_pkg::RES_W,
  parameter int unsigned ACC_W        = pm_pkg::ACC_W,
  parameter int unsigned T_W          = pm_pkg::T_W,
  parameter int unsigned NODE_AW      = 9,
  parameter int unsigned FEAT_DEPTH   = 16,
  parameter int unsigned RES_DEPTH    = 4,
  localparam int unsigned CL_W        = (NUM_LEARNERS > 1) ? $clog2(NUM_LEARNERS) : 1,
  localparam int unsigned FEAT_AW     = (NUM_FEAT > 1) ? $clog2(NUM_FEAT) : 1,
  localparam int unsigned NODE_W      = 1 + CNT_W + 2*NODE_AW + FEAT_AW
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           seg_valid,
  input  logic [NUM_LEARNERS-1:0]        learner_en,
  input  logic [CNT_W-1:0]               seg_cycles,
  input  logic [NUM_FEAT-1:0][CNT_W-1:0] seg_feat,
  input  logic                           seg_inv_end,
  input  logic [T_W-1:0]                 seg_total,
  input  logic                           cfg_we,
  input  logic [CL_W-1:0]                cfg_learner,
  input  logic [NODE_AW-1:0]             cfg_addr,
  input  logic [NODE_W-1:0]              cfg_data,
  output logic                           power_valid,
  output logic [RES_W-1:0]               power,
  output logic                           overflow,
  output logic [NUM_LEARNERS-1:0]        learner_stall
);

  logic [NUM_LEARNERS-1:0]            bl_wr, bl_ovf, bl_res_valid;
  logic [NUM_LEARNERS-1:0][ACC_W-1:0] bl_res_data;
  logic                               res_pop;

  for (genvar i = 0; i < NUM_LEARNERS; i++) begin : g_bl
    assign bl_wr[i] = seg_valid && (learner_en[i] || seg_inv_end);

    base_learner #(
      .NUM_FEAT(NUM_FEAT), .CNT_W(CNT_W), .RES_W(RES_W), .ACC_W(ACC_W),
      .NODE_AW(NODE_AW), .FEAT_DEPTH(FEAT_DEPTH), .RES_DEPTH(RES_DEPTH)
    ) u_bl (
      .clk, .rst_n,
      .in_valid(bl_wr[i]), .in_has_feat(learner_en[i]), .in_inv_end(seg_inv_end),
      .in_cycles(seg_cycles), .in_feat(seg_feat),
      .res_valid(bl_res_valid[i]), .res_data(bl_res_data[i]), .res_pop(res_pop),
      .feat_overflow(bl_ovf[i]), .stall(learner_stall[i]),
      .cfg_we(cfg_we && (cfg_learner == CL_W'(i))), .cfg_addr, .cfg_data
    );
  end

  // Invocation lengths, in step with the result FIFOs.  A learner can hold
  // up to FEAT_DEPTH pending end markers plus RES_DEPTH results, so the
  // FIFO is made deep enough that it never fills before a feature FIFO does.
  localparam int unsigned T_DEPTH = 2 * ((FEAT_DEPTH > RES_DEPTH) ? FEAT_DEPTH : RES_DEPTH);

  logic           t_empty, t_full, t_ovf;
  logic [T_W-1:0] t_head;
  logic [$clog2(T_DEPTH):0] t_count;

  sync_fifo #(.WIDTH(T_W), .DEPTH(T_DEPTH)) u_t_fifo (
    .clk, .rst_n,
    .wr_en(seg_valid && seg_inv_end), .wr_data(seg_total), .full(t_full),
    .rd_en(res_pop), .rd_data(t_head), .empty(t_empty),
    .overflow(t_ovf), .count(t_count)
  );

  summing_scaling #(
    .NUM_LEARNERS(NUM_LEARNERS), .ACC_W(ACC_W), .T_W(T_W), .RES_W(RES_W)
  ) u_sum (
    .clk, .rst_n,
    .res_valid(bl_res_valid), .res_data(bl_res_data), .res_pop,
    .t_valid(!t_empty), .t_data(t_head),
    .power_valid, .power
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    overflow <= 1'b0;
    else if ((|bl_ovf) || t_ovf)   overflow <= 1'b1;
  end

endmodule
