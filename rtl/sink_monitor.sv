// sink_monitor -- congestion predictor at one sink ingress.
//
// One per sink: the ingress queue, the feature unit that watches it and the
// decision tree that turns the smoothed features into the congestion signal.
// Every packet that reaches the sink (sunk or bounced) is a feature sample,
// as in the paper. The unit publishes a status word for the distress channel:
// the tree's output, the present occupancy N and the smoothed injection rate
// into the queue (the N and lambda of the sources' local condition). Sending
// N and lambda along with the tree bit is this design's choice; the paper
// does not say how a source learns them.
//
// Timing: accept/bounce are combinational; features follow one cycle after
// an event, the tree output one more.
module sink_monitor
  import cc_pkg::*;
#(
  parameter int unsigned DEPTH       = 32,
  parameter int unsigned ALPHA_SHIFT = 4,
  parameter int unsigned DT_DEPTH    = 4,
  parameter feat_t       OCC_THR     = feat_t'((DEPTH / 2) << FEAT_FRAC)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  pkt_t                  in_pkt,
  output logic                  in_accept,
  output logic                  in_bounce,
  output logic                  out_valid,
  output pkt_t                  out_pkt,
  input  logic                  out_ready,
  input  logic                  cfg_node_we,
  input  logic [DT_DEPTH-1:0]   cfg_node_idx,
  input  dt_node_t              cfg_node,
  input  logic                  cfg_leaf_we,
  input  logic [(1<<DT_DEPTH)-1:0] cfg_leaves,
  output sink_status_t          status,
  output feat_vec_t             feat
);
  logic [$clog2(DEPTH+1)-1:0] count;
  logic                       full;
  logic                       cong;
  logic [OCC_W-1:0]           occ;

  assign occ = OCC_W'(count);

  ingress_queue #(.DEPTH(DEPTH)) u_q (
    .clk, .rst_n, .in_valid, .in_pkt, .in_accept, .in_bounce,
    .out_valid, .out_pkt, .out_ready, .count, .full
  );

  feature_unit #(.ALPHA_SHIFT(ALPHA_SHIFT)) u_feat (
    .clk, .rst_n, .arr_valid(in_valid), .arr_sunk(in_accept), .occ,
    .dep_valid(out_valid && out_ready), .feat
  );

  decision_tree #(.DEPTH(DT_DEPTH), .OCC_THR(OCC_THR)) u_dt (
    .clk, .rst_n, .feat, .cfg_node_we, .cfg_node_idx, .cfg_node,
    .cfg_leaf_we, .cfg_leaves, .cong
  );

  assign status.cong   = cong;
  assign status.occ    = occ;
  assign status.lambda = feat[F_INJ_SINK];

endmodule
