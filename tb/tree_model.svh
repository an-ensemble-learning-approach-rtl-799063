// tree_model.svh: reference model of a decision tree for the testbenches.
//
// Included inside a testbench module after it defines TM_NF (features),
// TM_CNT_W (feature width), TM_AW (node address width), TM_RES_W (leaf
// width).  It builds random trees in an image of the structure memory, in
// the node format of dt_structure_memory, and walks them in software:
// decision nodes send feature <= coeff to the left child, else right.
localparam int TM_FAW    = (TM_NF > 1) ? $clog2(TM_NF) : 1;
localparam int TM_NODE_W = 1 + TM_CNT_W + 2*TM_AW + TM_FAW;

typedef logic [TM_NODE_W-1:0] tm_node_t;

tm_node_t tm_img [2**TM_AW];
int       tm_next_free;
int       tm_nf_used = TM_NF;   // decision nodes test features 0 .. tm_nf_used-1

function automatic tm_node_t tm_leaf(input logic [TM_RES_W-1:0] res);
  tm_node_t w = '0;
  w[TM_NODE_W-1]  = 1'b1;
  w[TM_RES_W-1:0] = res;
  return w;
endfunction

function automatic tm_node_t tm_decision(input logic [TM_CNT_W-1:0] coeff,
                                         input int left, input int right, input int feat);
  tm_node_t w = '0;
  w = {1'b0, coeff, TM_AW'(left), TM_AW'(right), TM_FAW'(feat)};
  return w;
endfunction

// Build a random subtree at address addr; returns nothing, fills tm_img.
// Leaves appear with some probability before max_depth decision levels.
function automatic void tm_build(input int addr, input int levels_left, input int coeff_max);
  if (levels_left == 0 || (levels_left < 3 && $urandom_range(0, 3) == 0)) begin
    tm_img[addr] = tm_leaf(TM_RES_W'($urandom));
  end else begin
    int l, r;
    l = tm_next_free; r = tm_next_free + 1;
    tm_next_free += 2;
    tm_img[addr] = tm_decision(TM_CNT_W'($urandom_range(0, coeff_max)), l, r,
                               $urandom_range(0, tm_nf_used - 1));
    tm_build(l, levels_left - 1, coeff_max);
    tm_build(r, levels_left - 1, coeff_max);
  end
endfunction

function automatic void tm_new_tree(input int depth, input int coeff_max);
  foreach (tm_img[i]) tm_img[i] = tm_leaf('0);
  tm_next_free = 1;
  tm_build(0, depth, coeff_max);
endfunction

// Walk the tree for one feature vector: returns the leaf value and the
// number of nodes visited (leaf included).
function automatic void tm_eval(input logic [TM_NF-1:0][TM_CNT_W-1:0] f,
                                output logic [TM_RES_W-1:0] res, output int nodes);
  int a = 0;
  nodes = 0;
  forever begin
    tm_node_t w = tm_img[a];
    nodes++;
    if (w[TM_NODE_W-1]) begin
      res = w[TM_RES_W-1:0];
      return;
    end else begin
      logic [TM_CNT_W-1:0] c = w[TM_NODE_W-2 -: TM_CNT_W];
      int fi = int'(w[TM_FAW-1:0]);
      if (f[fi] <= c) a = int'(w[TM_FAW + 2*TM_AW - 1 -: TM_AW]);
      else            a = int'(w[TM_FAW + TM_AW - 1 -: TM_AW]);
    end
  end
endfunction
