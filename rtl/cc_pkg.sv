// cc_pkg -- shared types and constants of the proactive NoC congestion
// control logic.
//
// Feature values are signed fixed point, Q7.8 in 16 bits (FEAT_FRAC = 8
// fractional bits), so rates in packets/cycle, occupancies, cycle counts,
// squared coefficients of variation and gradients share one type and one
// comparator in the decision tree. The fourteen features follow the list of
// per-sink congestion indicators (injection rates, coefficients of variation,
// deflection rate, service time, occupancy, probability of a full queue and
// four gradients); the index order and the fixed-point format are choices of
// this design.
package cc_pkg;

  // Node and packet fields. Up to 64 nodes; a 6x6 mesh uses 36.
  localparam int unsigned NODE_W    = 6;
  localparam int unsigned PAYLOAD_W = 16;

  typedef struct packed {
    logic [NODE_W-1:0]    src;
    logic [NODE_W-1:0]    dst;
    logic [PAYLOAD_W-1:0] payload;
  } pkt_t;

  // Feature fixed point format.
  localparam int unsigned FEAT_W    = 16;
  localparam int unsigned FEAT_FRAC = 8;
  typedef logic signed [FEAT_W-1:0] feat_t;
  localparam feat_t FEAT_ONE = feat_t'(1 << FEAT_FRAC);
  localparam feat_t FEAT_MAX = feat_t'((1 << (FEAT_W-1)) - 1);
  localparam feat_t FEAT_MIN = feat_t'(-(1 << (FEAT_W-1)));

  // Largest inter-event time that is measured, in cycles (fits Q7.8).
  localparam int unsigned DT_MAX = 127;

  localparam int unsigned NUM_FEAT = 14;
  localparam int unsigned FIDX_W   = 4;

  typedef enum logic [FIDX_W-1:0] {
    F_INJ_SINK    = 4'd0,   // injection rate into the sink queue
    F_INJ_TOTAL   = 4'd1,   // total arrival rate (sunk + deflected)
    F_COV_TOTAL   = 4'd2,   // CoV^2 of inter-arrival time, all arrivals
    F_COV_SINK    = 4'd3,   // CoV^2 of inter-arrival time, sunk arrivals
    F_DEFL_RATE   = 4'd4,   // rate of deflected packets
    F_SVC_MEAN    = 4'd5,   // mean service time of the sink queue
    F_COV_DEFL    = 4'd6,   // CoV^2 of deflected-packet inter-arrival time
    F_COV_DEP     = 4'd7,   // CoV^2 of sink queue inter-departure time
    F_OCC         = 4'd8,   // occupancy
    F_P_FULL      = 4'd9,   // probability that the queue is full
    F_GRAD_INJ    = 4'd10,  // gradient of injection rate into the queue
    F_GRAD_OCC    = 4'd11,  // gradient of occupancy
    F_GRAD_TOTAL  = 4'd12,  // gradient of total arrival rate
    F_GRAD_PFULL  = 4'd13   // gradient of probability of a full queue
  } feat_idx_e;

  typedef feat_t feat_vec_t [NUM_FEAT];

  // One decision-tree node: go right when feat[fidx] > thr.
  typedef struct packed {
    logic [FIDX_W-1:0] fidx;
    feat_t             thr;
  } dt_node_t;

  // Status a sink publishes on the distress channel.
  localparam int unsigned OCC_W = 7;   // occupancy up to 127 entries
  typedef struct packed {
    logic             cong;    // decision tree output: throttle
    logic [OCC_W-1:0] occ;     // current queue occupancy N
    feat_t            lambda;  // smoothed injection rate into the queue
  } sink_status_t;

  // Saturate a wide signed value into feat_t.
  function automatic feat_t sat_feat(input logic signed [47:0] v);
    if (v > 48'(FEAT_MAX))      return FEAT_MAX;
    else if (v < 48'(FEAT_MIN)) return FEAT_MIN;
    else                        return feat_t'(v);
  endfunction

endpackage
