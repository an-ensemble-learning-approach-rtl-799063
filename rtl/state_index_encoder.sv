// state_index_encoder: turns a one-hot FSM state register into a state index.
//
// HLS tools commonly encode the controller FSM one-hot, and the cluster
// lookup table of the overview figure is drawn with one-hot state codes
// (0001 -> cluster 1, 0010 -> cluster 2, ...).  The rest of this monitor works
// on a binary state number, so this encoder sits between the application's
// state register and the feature generator when the top is built with
// STATE_ONEHOT = 1.
//
// How it works: the index is the OR of the positions of all set bits, the
// usual OR-tree one-hot encoder.  For a one-hot input this is the position of
// the set bit; an all-zero input gives index 0 and valid = 0.  An input with
// several bits set is not a legal state and gives the OR of their positions.
//
// Interface: onehot (2**STATE_W bits) in, index (STATE_W bits) and valid out.
// Timing: purely combinational; the feature generator registers the result.
// The one-hot codes come from the paper's figure; the encoder itself and the
// handling of illegal codes are this design's choices.
module state_index_encoder #(
  parameter int unsigned STATE_W = pm_pkg::STATE_W
) (
  input  logic [2**STATE_W-1:0] onehot,
  output logic [STATE_W-1:0]    index,
  output logic                  valid
);

  always_comb begin
    index = '0;
    for (int unsigned i = 0; i < 2**STATE_W; i++) begin
      if (onehot[i]) index = index | STATE_W'(i);
    end
  end

  assign valid = |onehot;

endmodule
