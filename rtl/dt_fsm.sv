// dt_fsm: walks a decision tree stored in dt_structure_memory.
//
// Four states, as in the paper: idle (I), node read (N), stalling (S) and
// result output (R).  A start request moves I -> N.  In N the walker presents
// a node address to the memory: the root on the first visit, afterwards the
// left or the right child of the node just read, chosen by comparing the
// registered feature value with the node's coefficient
// (feature <= coeff -> left).  In S the memory word arrives: its feature index
// goes to the feature controller, its fields are registered, and the walker
// returns to N for a decision node or moves on to R for a leaf.  R presents
// the leaf value on result with done high for one cycle and returns to I.
//
// Timing: for a path of n nodes (leaf included) done rises 2n+1 cycles after
// the cycle in which cal_start was accepted -- the paper's bound of 2n+1
// cycles per estimation.  The N/S pairing absorbs both the one-cycle memory
// read latency and the one-cycle feature select.
//
// The state set, the I->N, N<->S, S->R, R->I transitions (arrows in the
// paper's engine figure) and the "<=" rule (memory figure) follow the paper;
// the exact cycle-by-cycle split of work between N and S is this design's.
module dt_fsm #(
  parameter int unsigned NUM_FEAT     = 30,
  parameter int unsigned CNT_W    = pm_pkg::CNT_W,
  parameter int unsigned RES_W    = pm_pkg::RES_W,
  parameter int unsigned NODE_AW  = 9,
  localparam int unsigned FEAT_AW = (NUM_FEAT > 1) ? $clog2(NUM_FEAT) : 1,
  localparam int unsigned NODE_W  = 1 + CNT_W + 2*NODE_AW + FEAT_AW
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cal_start,
  input  logic [CNT_W-1:0]   act_value,
  output logic [FEAT_AW-1:0] act_sel,
  output logic [NODE_AW-1:0] mem_addr,
  input  logic [NODE_W-1:0]  mem_rdata,
  output logic               idle,
  output logic               done,
  output logic [RES_W-1:0]   result,
  output pm_pkg::dt_state_e  fsm_state
);
  import pm_pkg::*;

  // Fields of the word read from the structure memory.
  logic               rd_is_leaf;
  logic [CNT_W-1:0]   rd_coeff;
  logic [NODE_AW-1:0] rd_left, rd_right;
  logic [FEAT_AW-1:0] rd_act_addr;
  logic [RES_W-1:0]   rd_result;

  assign rd_is_leaf  = mem_rdata[NODE_W-1];
  assign rd_coeff    = mem_rdata[NODE_W-2 -: CNT_W];
  assign rd_left     = mem_rdata[FEAT_AW + 2*NODE_AW - 1 -: NODE_AW];
  assign rd_right    = mem_rdata[FEAT_AW + NODE_AW - 1 -: NODE_AW];
  assign rd_act_addr = mem_rdata[FEAT_AW-1:0];
  assign rd_result   = mem_rdata[RES_W-1:0];

  dt_state_e          state_q;
  logic               at_root_q;
  logic [CNT_W-1:0]   coeff_q;
  logic [NODE_AW-1:0] left_q, right_q, addr_q;
  logic [NODE_AW-1:0] next_addr;

  // Branch decision of the node read in the previous S state.
  assign next_addr = at_root_q ? '0 : ((act_value <= coeff_q) ? left_q : right_q);
  assign mem_addr  = (state_q == DT_NODE) ? next_addr : addr_q;
  assign act_sel   = rd_act_addr;
  assign idle      = (state_q == DT_IDLE);
  assign done      = (state_q == DT_RES);
  assign fsm_state = state_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= DT_IDLE;
      at_root_q <= 1'b1;
      coeff_q   <= '0;
      left_q    <= '0;
      right_q   <= '0;
      addr_q    <= '0;
      result    <= '0;
    end else begin
      unique case (state_q)
        DT_IDLE: begin
          at_root_q <= 1'b1;
          if (cal_start) state_q <= DT_NODE;
        end
        DT_NODE: begin
          addr_q    <= next_addr;
          at_root_q <= 1'b0;
          state_q   <= DT_STALL;
        end
        DT_STALL: begin
          coeff_q <= rd_coeff;
          left_q  <= rd_left;
          right_q <= rd_right;
          if (rd_is_leaf) begin
            result  <= rd_result;
            state_q <= DT_RES;
          end else begin
            state_q <= DT_NODE;
          end
        end
        DT_RES: begin
          state_q <= DT_IDLE;
        end
        default: state_q <= DT_IDLE;
      endcase
    end
  end

endmodule
