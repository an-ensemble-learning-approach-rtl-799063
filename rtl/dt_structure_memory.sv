// dt_structure_memory: block memory holding one trained decision tree.
//
// Every word is one tree node.  The top bit tells a leaf from a decision
// node.  A decision node holds, from the top down, the comparison
// coefficient, the address of the left child (taken when
// feature <= coefficient), the address of the right child and the index of
// the feature to compare.  A leaf holds its output value in the low bits:
//
//   decision: | 1'b0 | coeff[CNT_W] | left[NODE_AW] | right[NODE_AW] | act_addr[FEAT_AW] |
//   leaf:     | 1'b1 | unused                                         | result[RES_W]     |
//
// The root lives at address 0.  The field set and order follow the paper's
// memory figure (Is_current_leaf, Current_coeff_val, Next_left_addr,
// Next_right_addr, Current_act_addr / Result); the bit widths, the root
// address and the load port are this design's choices.
//
// Timing: synchronous read, as in an FPGA block RAM -- rdata shows the word
// at the raddr of the previous cycle.  The write port loads the trained tree
// before monitoring starts.
module dt_structure_memory #(
  parameter int unsigned NODE_W  = 44,
  parameter int unsigned NODE_AW = 9
) (
  input  logic               clk,
  input  logic [NODE_AW-1:0] raddr,
  output logic [NODE_W-1:0]  rdata,
  input  logic               we,
  input  logic [NODE_AW-1:0] waddr,
  input  logic [NODE_W-1:0]  wdata
);

  logic [NODE_W-1:0] mem [2**NODE_AW];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
