// decision_tree -- binary decision tree that predicts congestion at a sink.
//
// A complete binary tree of depth DEPTH (4 by default, the depth the paper
// selects) is stored as 2^DEPTH - 1 internal nodes in heap order (node i has
// children 2i+1 and 2i+2) and 2^DEPTH leaf bits. Every internal node compares
// one smoothed feature with a threshold and goes right when
// feat[fidx] > thr (signed Q7.8). After DEPTH levels the path bits, root
// first, index the leaf, whose bit is the prediction: 1 = likely to congest,
// throttle the sources; 0 = safe to send. The walk is combinational and the
// result is registered.
//
// The tree is trained offline, so nodes and leaves are configuration
// registers written through cfg_*. The reset contents implement the example
// rule the paper quotes for its trained tree -- congest when the occupancy is
// high and the gradient of the injection rate is positive: the root tests
// occupancy > OCC_THR (default 16 of a 32-entry queue), depth 1 tests the
// injection-rate gradient > 0, the lower levels repeat the occupancy test and
// only the four leaves under (right, right) are 1. The paper does not publish
// the trained thresholds; OCC_THR and the programming port are this design's
// choices.
//
// Timing: cong is valid one cycle after the features.
module decision_tree
  import cc_pkg::*;
#(
  parameter int unsigned DEPTH   = 4,
  parameter feat_t       OCC_THR = feat_t'(16 << FEAT_FRAC)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  feat_vec_t                 feat,
  // configuration: node write and leaf write
  input  logic                      cfg_node_we,
  input  logic [DEPTH-1:0]          cfg_node_idx,
  input  dt_node_t                  cfg_node,
  input  logic                      cfg_leaf_we,
  input  logic [(1<<DEPTH)-1:0]     cfg_leaves,
  output logic                      cong
);
  localparam int unsigned NNODE = (1 << DEPTH) - 1;
  localparam int unsigned NLEAF = 1 << DEPTH;

  dt_node_t           node [NNODE];
  logic [NLEAF-1:0]   leaf;
  logic [DEPTH-1:0]   path;
  logic               pred;

  function automatic dt_node_t default_node(input int unsigned i);
    dt_node_t n;
    n.fidx = F_OCC;
    n.thr  = OCC_THR;
    if (i == 1 || i == 2) begin
      n.fidx = F_GRAD_INJ;
      n.thr  = '0;
    end
    return n;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < NNODE; i++) node[i] <= default_node(i);
      // leaves whose two top path bits are both 1
      leaf <= {{(NLEAF/4){1'b1}}, {(3*NLEAF/4){1'b0}}};
    end else begin
      if (cfg_node_we && 32'(cfg_node_idx) < NNODE) node[cfg_node_idx] <= cfg_node;
      if (cfg_leaf_we) leaf <= cfg_leaves;
    end
  end

  always_comb begin
    int unsigned idx;
    idx  = 0;
    path = '0;
    for (int unsigned lvl = 0; lvl < DEPTH; lvl++) begin
      logic  go_right;
      feat_t fv;
      // indices past the last feature read as 0
      fv = (32'(node[idx].fidx) < NUM_FEAT) ? feat[node[idx].fidx] : '0;
      go_right = fv > node[idx].thr;
      path[DEPTH-1-lvl] = go_right;
      idx = 2*idx + 1 + 32'(go_right);
    end
    pred = leaf[path];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cong <= 1'b0;
    else        cong <= pred;
  end

endmodule
