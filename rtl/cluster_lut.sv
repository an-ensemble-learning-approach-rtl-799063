// cluster_lut: maps the FSM state of a finished segment to its cluster.
//
// The table holds the trained state-to-cluster assignment r(s, c) produced
// offline by k-means: entry s is the index of the cluster (and base learner)
// that state s belongs to.  Because the clusters are disjoint, one index per
// state is enough.  For every valid segment the table produces the cluster
// index and a one-hot write enable for that learner's feature FIFO.
//
// Interface: cfg_we/cfg_state/cfg_cluster write one entry (the trained table
// is loaded at start-up, before monitoring); seg_valid/seg_state look up an
// entry combinationally (distributed-RAM style).  All entries reset to
// cluster 0.
//
// Function and placement follow the paper.  The write port, the binary state
// index (the paper's figure shows one-hot codes such as 0001 -> cluster 1)
// and the reset value are this design's choices.
module cluster_lut #(
  parameter int unsigned NUM_LEARNERS = 64,
  parameter int unsigned STATE_W      = pm_pkg::STATE_W,
  localparam int unsigned CL_W        = (NUM_LEARNERS > 1) ? $clog2(NUM_LEARNERS) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cfg_we,
  input  logic [STATE_W-1:0]      cfg_state,
  input  logic [CL_W-1:0]         cfg_cluster,
  input  logic                    seg_valid,
  input  logic [STATE_W-1:0]      seg_state,
  output logic [CL_W-1:0]         cluster,
  output logic [NUM_LEARNERS-1:0] learner_en
);

  localparam int unsigned NUM_STATES = 2**STATE_W;

  logic [CL_W-1:0] table_q [NUM_STATES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NUM_STATES; s++) table_q[s] <= '0;
    end else if (cfg_we) begin
      table_q[cfg_state] <= cfg_cluster;
    end
  end

  assign cluster = table_q[seg_state];

  always_comb begin
    learner_en = '0;
    if (seg_valid) learner_en[cluster] = 1'b1;
  end

  a_cluster_in_range : assert property (@(posedge clk) disable iff (!rst_n)
      cfg_we |-> (32'(cfg_cluster) < NUM_LEARNERS))
    else $error("cluster_lut: cluster index out of range");

endmodule
