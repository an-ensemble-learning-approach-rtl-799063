// tb_cluster_lut: self-checking test of the state-to-cluster lookup table.
//
// Loads a random assignment of all 256 states to 64 clusters, rewrites some
// entries, and checks for random states that the cluster index and the
// one-hot learner enable are right, and that no enable is raised without a
// valid segment.  Also checks the reset value (cluster 0).
module tb_cluster_lut;
  localparam int K = 64, SW = 8, CL_W = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_we, seg_valid;
  logic [SW-1:0] cfg_state, seg_state;
  logic [CL_W-1:0] cfg_cluster, cluster;
  logic [K-1:0] learner_en;
  int model [2**SW];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  cluster_lut #(.NUM_LEARNERS(K), .STATE_W(SW)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic lookup(input int s, input bit v);
    @(negedge clk);
    seg_state = SW'(s); seg_valid = v;
    #1;
    check(int'(cluster) == model[s], $sformatf("state %0d cluster %0d exp %0d", s, cluster, model[s]));
    check(learner_en == (v ? (K'(1) << model[s]) : '0), $sformatf("state %0d enable", s));
  endtask

  initial begin
    cfg_we = 0; cfg_state = '0; cfg_cluster = '0; seg_valid = 0; seg_state = '0;
    foreach (model[i]) model[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 20; i++) lookup($urandom_range(0, 255), 1);
    for (int s = 0; s < 2**SW; s++) begin
      @(negedge clk);
      cfg_we = 1; cfg_state = SW'(s); cfg_cluster = CL_W'($urandom_range(0, K - 1));
      model[s] = int'(cfg_cluster);
    end
    @(negedge clk); cfg_we = 0;
    for (int i = 0; i < 1000; i++) begin
      if (i % 50 == 0) begin
        int s;
        s = $urandom_range(0, 255);
        @(negedge clk);
        cfg_we = 1; cfg_state = SW'(s); cfg_cluster = CL_W'($urandom_range(0, K - 1));
        model[s] = int'(cfg_cluster);
        @(negedge clk); cfg_we = 0;
      end
      lookup($urandom_range(0, 255), 1'($urandom_range(0, 3) != 0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
