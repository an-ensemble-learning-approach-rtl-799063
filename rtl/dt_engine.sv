// dt_engine: memory-based decision tree regression engine of one base learner.
//
// Joins the three parts the paper names: the feature controller, the
// decision tree FSM and the decision tree structure memory.  A feature
// vector waiting at feat/feat_valid (the head of the learner's feature FIFO)
// is classified by walking the stored tree from the root; the leaf value
// appears on result with done high for one cycle, and feat_pop asks the
// FIFO for the next vector in the same cycle.
//
// Interface: cfg_we/cfg_addr/cfg_data load tree nodes (format in
// dt_structure_memory).  Timing: done comes 2n+1 cycles after the start,
// n being the number of nodes on the path taken, leaf included; a new
// estimation can start in the cycle after done.  Each node costs one memory
// read, so trees of any shape and depth up to the memory size can be loaded.
module dt_engine #(
  parameter int unsigned NUM_FEAT     = 30,
  parameter int unsigned CNT_W    = pm_pkg::CNT_W,
  parameter int unsigned RES_W    = pm_pkg::RES_W,
  parameter int unsigned NODE_AW  = 9,
  localparam int unsigned FEAT_AW = (NUM_FEAT > 1) ? $clog2(NUM_FEAT) : 1,
  localparam int unsigned NODE_W  = 1 + CNT_W + 2*NODE_AW + FEAT_AW
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           feat_valid,
  input  logic [NUM_FEAT-1:0][CNT_W-1:0] feat,
  output logic                           feat_pop,
  output logic                           done,
  output logic [RES_W-1:0]               result,
  output logic                           busy,
  input  logic                           cfg_we,
  input  logic [NODE_AW-1:0]             cfg_addr,
  input  logic [NODE_W-1:0]              cfg_data
);

  logic               fsm_idle, cal_start;
  logic [FEAT_AW-1:0] act_sel;
  logic [CNT_W-1:0]   act_value;
  logic [NODE_AW-1:0] mem_addr;
  logic [NODE_W-1:0]  mem_rdata;
  pm_pkg::dt_state_e  fsm_state;

  dt_feature_controller #(.NUM_FEAT(NUM_FEAT), .CNT_W(CNT_W)) u_fc (
    .clk, .rst_n,
    .feat_valid, .feat, .feat_pop,
    .fsm_idle, .fsm_done(done), .act_sel, .act_value, .cal_start
  );

  dt_fsm #(.NUM_FEAT(NUM_FEAT), .CNT_W(CNT_W), .RES_W(RES_W), .NODE_AW(NODE_AW)) u_fsm (
    .clk, .rst_n,
    .cal_start, .act_value, .act_sel,
    .mem_addr, .mem_rdata,
    .idle(fsm_idle), .done, .result, .fsm_state
  );

  dt_structure_memory #(.NODE_W(NODE_W), .NODE_AW(NODE_AW)) u_mem (
    .clk,
    .raddr(mem_addr), .rdata(mem_rdata),
    .we(cfg_we), .waddr(cfg_addr), .wdata(cfg_data)
  );

  assign busy = !fsm_idle;

endmodule
