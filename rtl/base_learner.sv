// base_learner: one member of the ensemble, specialised to one cluster of
// FSM states.
//
// Chain: feature FIFO -> decision tree engine -> weighted aggregation ->
// result FIFO.  Each feature FIFO entry is one finished state segment of a
// state in this learner's cluster: {has_feat, inv_end, cycles, features}.
// Entries with has_feat low carry only the end-of-invocation marker, which
// every learner receives so that all result FIFOs get exactly one entry per
// invocation and stay aligned.  The tree estimates the power of the segment,
// the aggregation weights it by the segment length, and at the invocation's
// end the weighted sum p(c_i) goes to the result FIFO.
//
// Back-pressure: an entry that closes an invocation waits while the result
// FIFO is full (stall pulses for each such cycle).  The feature FIFO cannot
// stall the application: a segment arriving at a full feature FIFO is lost
// and feat_overflow pulses.
//
// Interface: in_* writes one entry; res_valid/res_data/res_pop are the
// result FIFO head; cfg_* loads the tree.  The FIFOs, tree and aggregation
// follow the paper; the entry format, marker and depths are this design's.
module base_learner #(
  parameter int unsigned NUM_FEAT     = 30,
  parameter int unsigned CNT_W      = pm_pkg::CNT_W,
  parameter int unsigned RES_W      = pm_pkg::RES_W,
  parameter int unsigned ACC_W      = pm_pkg::ACC_W,
  parameter int unsigned NODE_AW    = 9,
  parameter int unsigned FEAT_DEPTH = 16,
  parameter int unsigned RES_DEPTH  = 4,
  localparam int unsigned FEAT_AW   = (NUM_FEAT > 1) ? $clog2(NUM_FEAT) : 1,
  localparam int unsigned NODE_W    = 1 + CNT_W + 2*NODE_AW + FEAT_AW
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in_valid,
  input  logic                           in_has_feat,
  input  logic                           in_inv_end,
  input  logic [CNT_W-1:0]               in_cycles,
  input  logic [NUM_FEAT-1:0][CNT_W-1:0] in_feat,
  output logic                           res_valid,
  output logic [ACC_W-1:0]               res_data,
  input  logic                           res_pop,
  output logic                           feat_overflow,
  output logic                           stall,
  input  logic                           cfg_we,
  input  logic [NODE_AW-1:0]             cfg_addr,
  input  logic [NODE_W-1:0]              cfg_data
);

  typedef struct packed {
    logic                           has_feat;
    logic                           inv_end;
    logic [CNT_W-1:0]               cycles;
    logic [NUM_FEAT-1:0][CNT_W-1:0] feat;
  } entry_t;

  localparam int unsigned ENTRY_W = $bits(entry_t);

  entry_t wr_entry, head;
  logic   ff_empty, ff_full, ff_rd;
  logic [$clog2(FEAT_DEPTH):0] ff_count;

  assign wr_entry = '{has_feat: in_has_feat, inv_end: in_inv_end,
                      cycles: in_cycles, feat: in_feat};

  sync_fifo #(.WIDTH(ENTRY_W), .DEPTH(FEAT_DEPTH)) u_feat_fifo (
    .clk, .rst_n,
    .wr_en(in_valid), .wr_data(wr_entry), .full(ff_full),
    .rd_en(ff_rd), .rd_data(head), .empty(ff_empty),
    .overflow(feat_overflow), .count(ff_count)
  );

  logic rf_full, rf_empty, rf_wr, rf_ovf;
  logic [ACC_W-1:0] agg_p;
  logic [$clog2(RES_DEPTH):0] rf_count;

  // An entry may proceed unless it ends an invocation and there is no room
  // for the invocation's result.
  logic head_ok, tree_go, marker_go;
  logic eng_pop, eng_done, eng_busy;
  logic [RES_W-1:0] eng_result;

  assign head_ok   = !ff_empty && (!head.inv_end || !rf_full);
  assign tree_go   = head_ok && head.has_feat;
  assign marker_go = head_ok && !head.has_feat && !eng_busy;
  assign stall     = !ff_empty && head.inv_end && rf_full && !eng_busy;
  assign ff_rd     = eng_pop || marker_go;

  dt_engine #(.NUM_FEAT(NUM_FEAT), .CNT_W(CNT_W), .RES_W(RES_W), .NODE_AW(NODE_AW)) u_tree (
    .clk, .rst_n,
    .feat_valid(tree_go), .feat(head.feat), .feat_pop(eng_pop),
    .done(eng_done), .result(eng_result), .busy(eng_busy),
    .cfg_we, .cfg_addr, .cfg_data
  );

  weighted_aggregation #(.RES_W(RES_W), .CYC_W(CNT_W), .ACC_W(ACC_W)) u_agg (
    .clk, .rst_n,
    .in_valid(eng_done || marker_go), .in_has_y(eng_done), .in_y(eng_result),
    .in_t(head.cycles), .in_last(head.inv_end),
    .out_valid(rf_wr), .out_p(agg_p)
  );

  sync_fifo #(.WIDTH(ACC_W), .DEPTH(RES_DEPTH)) u_res_fifo (
    .clk, .rst_n,
    .wr_en(rf_wr), .wr_data(agg_p), .full(rf_full),
    .rd_en(res_pop), .rd_data(res_data), .empty(rf_empty),
    .overflow(rf_ovf), .count(rf_count)
  );

  assign res_valid = !rf_empty;

  // The result FIFO is protected by the stall above and must never overflow.
  a_no_result_overflow : assert property (@(posedge clk) disable iff (!rst_n) !rf_ovf)
    else $error("base_learner: result FIFO overflow");

endmodule
