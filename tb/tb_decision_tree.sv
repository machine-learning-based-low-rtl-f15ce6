// tb_decision_tree -- self-checking test of the depth-4 decision tree.
//
// First the reset tree is checked against the rule it encodes, written
// directly: congested = (occupancy > 16.0) and (injection-rate gradient > 0),
// for random feature vectors, with the one-cycle latency. Then random trees
// (random feature index and threshold per node, random leaves) are written
// through the configuration port and the output is compared with a
// reference walk of the same tree.
module tb_decision_tree;
  import cc_pkg::*;
  localparam int unsigned DEPTH = 4;

  logic clk = 0, rst_n = 0;
  feat_vec_t feat;
  logic cfg_node_we, cfg_leaf_we, cong;
  logic [DEPTH-1:0] cfg_node_idx;
  dt_node_t cfg_node;
  logic [15:0] cfg_leaves;
  int checks = 0, failures = 0, ones = 0;

  dt_node_t ref_node [15];
  logic [15:0] ref_leaf;

  decision_tree #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic walk(feat_vec_t f);
    int i = 0;
    int leaf = 0;
    for (int l = 0; l < 4; l++) begin
      logic r;
      r = (ref_node[i].fidx < NUM_FEAT) ? (f[ref_node[i].fidx] > ref_node[i].thr)
                                        : (0 > ref_node[i].thr);
      leaf = leaf * 2 + int'(r);
      i = r ? 2*i + 2 : 2*i + 1;
    end
    return ref_leaf[leaf];
  endfunction

  task automatic rand_feat();
    for (int k = 0; k < NUM_FEAT; k++) feat[k] = feat_t'($urandom_range(0, 2*32*256) - 32*256);
  endtask

  initial begin
    logic exp_c;
    cfg_node_we = 0; cfg_leaf_we = 0; cfg_node_idx = '0; cfg_node = '0; cfg_leaves = '0;
    for (int k = 0; k < NUM_FEAT; k++) feat[k] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    // Reset tree = occupancy high and injection gradient positive
    for (int t = 0; t < 2000; t++) begin
      rand_feat();
      if (t % 7 == 0) feat[F_OCC] = feat_t'(16 * 256);       // on the threshold
      if (t % 11 == 0) feat[F_GRAD_INJ] = '0;
      exp_c = (feat[F_OCC] > feat_t'(16*256)) && (feat[F_GRAD_INJ] > 0);
      @(posedge clk); #1;
      check(cong == exp_c, "reset tree rule");
      if (cong) ones++;
      @(negedge clk);
    end
    check(ones > 100, "reset tree predicts congestion sometimes");
    // Random trees
    for (int tr = 0; tr < 20; tr++) begin
      for (int n = 0; n < 15; n++) begin
        ref_node[n].fidx = FIDX_W'($urandom_range(0, NUM_FEAT-1));
        ref_node[n].thr  = feat_t'($urandom_range(0, 2*16*256) - 16*256);
        cfg_node_we = 1; cfg_node_idx = DEPTH'(n); cfg_node = ref_node[n];
        @(negedge clk);
      end
      cfg_node_we = 0;
      ref_leaf = 16'($urandom);
      cfg_leaf_we = 1; cfg_leaves = ref_leaf;
      @(negedge clk);
      cfg_leaf_we = 0;
      for (int t = 0; t < 200; t++) begin
        rand_feat();
        exp_c = walk(feat);
        @(posedge clk); #1;
        check(cong == exp_c, "programmed tree");
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
