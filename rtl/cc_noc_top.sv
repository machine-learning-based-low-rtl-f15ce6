// cc_noc_top -- proactive, decision-tree based source throttling for a
// bufferless deflection-routed mesh NoC (6x6 by default).
//
// Every node has a traffic source (a core's NoC interface) and a sink ingress
// (the cache bank or memory controller at that node). At each sink a
// sink_monitor keeps the ingress queue, samples traffic features on every
// arriving packet and evaluates a depth-4 decision tree that predicts whether
// the queue is about to block. The sinks' status words travel over the
// time-multiplexed distress_channel to a table that every source reads. Each
// source_controller applies the end-to-end rule: the Little's-law local
// condition (only at the highest-priority sources, the nodes in column 0 at
// the floorplan boundary), otherwise the destination's decision-tree bit;
// throttled requests wait while younger requests to other sinks go out.
//
// The mesh routers themselves are not part of this module: the network's
// injection and delivery sides are ports (inj_* per source, arr_* per sink),
// so the logic can be attached to an existing deflection NoC. A bounced
// arrival (arr_bounce) must be carried on by the network and presented
// again later. The decision trees are programmed, per sink, through cfg_*.
// Node n sits at x = n % MESH_X, y = n / MESH_X. Which nodes count as highest
// priority (column 0, after the example nodes 1, 5, 9, 13 of a 4x4 mesh in
// the paper) is a design parameter choice here.
//
// Timing: see the blocks; a sink status change reaches the sources within
// FRAME + PIPE cycles (10 by default).
module cc_noc_top
  import cc_pkg::*;
#(
  parameter int unsigned MESH_X      = 6,
  parameter int unsigned MESH_Y      = 6,
  parameter int unsigned QDEPTH      = 32,
  parameter int unsigned REQ_DEPTH   = 8,
  parameter int unsigned N_T         = 24,
  parameter int unsigned ALPHA_SHIFT = 4,
  parameter int unsigned DT_DEPTH    = 4,
  parameter int unsigned LANES       = 6,
  parameter int unsigned PIPE        = 4,
  localparam int unsigned NODES      = MESH_X * MESH_Y
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // cores -> source controllers
  input  logic                        req_valid [NODES],
  input  pkt_t                        req_pkt   [NODES],
  output logic                        req_ready [NODES],
  // source controllers -> NoC injection
  output logic                        inj_valid [NODES],
  output pkt_t                        inj_pkt   [NODES],
  input  logic                        inj_ready [NODES],
  // NoC delivery -> sink ingress
  input  logic                        arr_valid  [NODES],
  input  pkt_t                        arr_pkt    [NODES],
  output logic                        arr_accept [NODES],
  output logic                        arr_bounce [NODES],
  // sink ingress -> receiving agents
  output logic                        srv_valid [NODES],
  output pkt_t                        srv_pkt   [NODES],
  input  logic                        srv_ready [NODES],
  // decision tree programming
  input  logic [NODE_W-1:0]           cfg_sink,
  input  logic                        cfg_node_we,
  input  logic [DT_DEPTH-1:0]         cfg_node_idx,
  input  dt_node_t                    cfg_node,
  input  logic                        cfg_leaf_we,
  input  logic [(1<<DT_DEPTH)-1:0]    cfg_leaves,
  // observation
  output logic                        sink_cong [NODES],
  output logic                        thr_lc    [NODES],
  output logic                        thr_dt    [NODES],
  output logic                        bypass    [NODES]
);
  sink_status_t st_sink [NODES];
  sink_status_t st_src  [NODES];

  for (genvar n = 0; n < NODES; n++) begin : g_node
    feat_vec_t feat;
    logic      sel;
    assign sel = (32'(cfg_sink) == n);

    sink_monitor #(
      .DEPTH(QDEPTH), .ALPHA_SHIFT(ALPHA_SHIFT), .DT_DEPTH(DT_DEPTH)
    ) u_sink (
      .clk, .rst_n,
      .in_valid(arr_valid[n]), .in_pkt(arr_pkt[n]),
      .in_accept(arr_accept[n]), .in_bounce(arr_bounce[n]),
      .out_valid(srv_valid[n]), .out_pkt(srv_pkt[n]), .out_ready(srv_ready[n]),
      .cfg_node_we(cfg_node_we && sel), .cfg_node_idx, .cfg_node,
      .cfg_leaf_we(cfg_leaf_we && sel), .cfg_leaves,
      .status(st_sink[n]), .feat
    );
    assign sink_cong[n] = st_sink[n].cong;

    source_controller #(
      .NUM_SINKS(NODES), .REQ_DEPTH(REQ_DEPTH),
      .HIPRI((n % MESH_X) == 0), .N_T(N_T), .ALPHA_SHIFT(ALPHA_SHIFT)
    ) u_src (
      .clk, .rst_n,
      .req_valid(req_valid[n]), .req_pkt(req_pkt[n]), .req_ready(req_ready[n]),
      .status(st_src),
      .inj_valid(inj_valid[n]), .inj_pkt(inj_pkt[n]), .inj_ready(inj_ready[n]),
      .thr_lc(thr_lc[n]), .thr_dt(thr_dt[n]), .bypass(bypass[n])
    );
  end

  distress_channel #(.NUM_SINKS(NODES), .LANES(LANES), .PIPE(PIPE)) u_chan (
    .clk, .rst_n, .status_in(st_sink), .status_out(st_src)
  );

endmodule
