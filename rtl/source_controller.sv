// source_controller -- congestion-aware request issue in a source's NoC
// interface.
//
// The core's new requests wait in a small age-ordered buffer (REQ_DEPTH
// entries, entry 0 the oldest). Every cycle each waiting request is checked
// against the status of its destination sink, as received over the distress
// channel, following the end-to-end algorithm of the paper: first the local
// condition (Little's law, only at highest-priority sources), then the sink's
// decision-tree bit. A request is throttled if either says so. The oldest
// request that is not throttled is offered to the NoC; throttled requests
// stay in the buffer, in order, until their sink's signal clears, so the
// source moves on to the next request instead of stalling behind them.
// t_avg, the average time between two throttling decisions used by the local
// condition, is the EWMA (alpha = 2^-ALPHA_SHIFT) of the cycles between
// successive requests sent by this source.
//
// The buffer depth, the oldest-first choice and taking a send as the
// decision instant for t_avg are this design's choices.
//
// Interface: req_* is a valid/ready port from the core. inj_valid/inj_pkt
// offer a packet to the NoC each cycle; the NoC takes it when inj_ready = 1
// (a free injection slot: packets already in the network go first).
// status[] is the table of sink status seen at this source.
// thr_lc/thr_dt pulse when a waiting request was held back this cycle by the
// local condition / the decision tree; bypass pulses when the packet sent was
// younger than a held-back one.
// Timing: inj_* is combinational from the buffer and status; a request
// accepted at a cycle can be sent from the next cycle on.
module source_controller
  import cc_pkg::*;
#(
  parameter int unsigned NUM_SINKS   = 36,
  parameter int unsigned REQ_DEPTH   = 8,
  parameter bit          HIPRI       = 1'b0,
  parameter int unsigned N_T         = 24,
  parameter int unsigned ALPHA_SHIFT = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         req_valid,
  input  pkt_t         req_pkt,
  output logic         req_ready,
  input  sink_status_t status [NUM_SINKS],
  output logic         inj_valid,
  output pkt_t         inj_pkt,
  input  logic         inj_ready,
  output logic         thr_lc,
  output logic         thr_dt,
  output logic         bypass
);
  localparam int unsigned CW = $clog2(REQ_DEPTH+1);
  localparam int unsigned AW = (REQ_DEPTH > 1) ? $clog2(REQ_DEPTH) : 1;

  pkt_t           rq   [REQ_DEPTH];
  logic [CW-1:0]  cnt;
  logic [REQ_DEPTH-1:0] lc, dt, held;
  logic           found;
  logic [CW-1:0]  sel;
  logic           fire, take;
  feat_t          t_avg;
  logic [15:0]    t_avg_u;
  logic [6:0]     send_gap;

  assign req_ready = (cnt != CW'(REQ_DEPTH));
  assign take      = req_valid && req_ready;

  for (genvar i = 0; i < REQ_DEPTH; i++) begin : g_chk
    sink_status_t st;
    logic         lc_i;
    assign st = (32'(rq[i].dst) < NUM_SINKS) ? status[rq[i].dst] : '0;
    local_condition #(.HIPRI(HIPRI), .N_T(N_T)) u_lc (
      .occ(st.occ), .lambda(st.lambda), .t_avg(t_avg), .throttle(lc_i)
    );
    assign lc[i]   = (CW'(i) < cnt) && lc_i;
    assign dt[i]   = (CW'(i) < cnt) && !lc_i && st.cong;
    assign held[i] = lc[i] || dt[i];
  end

  always_comb begin
    found = 1'b0;
    sel   = '0;
    for (int i = REQ_DEPTH-1; i >= 0; i--) begin
      if ((CW'(i) < cnt) && !held[i]) begin
        found = 1'b1;
        sel   = CW'(i);
      end
    end
  end

  assign inj_valid = found;
  assign inj_pkt   = rq[AW'(sel)];
  assign fire      = inj_valid && inj_ready;
  assign thr_lc    = |lc;
  assign thr_dt    = |dt;
  assign bypass    = fire && (sel != '0);

  // t_avg: smoothed gap between successive sends.
  event_age u_gap (.clk, .rst_n, .ev(fire), .restart(1'b0), .age(send_gap));
  ewma #(.W(16), .SHIFT(ALPHA_SHIFT)) u_tavg (
    .clk, .rst_n, .upd(fire), .sample(16'(send_gap) << FEAT_FRAC), .avg(t_avg_u)
  );
  assign t_avg = feat_t'(t_avg_u);

  // Buffer update: remove the sent entry (keeping age order), append the new one.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
    end else begin
      cnt <= cnt - CW'(fire) + CW'(take);
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < REQ_DEPTH; i++) begin
      if (fire && CW'(i) >= sel) begin
        if (i < REQ_DEPTH-1) rq[i] <= rq[i+1];
      end
    end
    if (take) rq[AW'(cnt - CW'(fire))] <= req_pkt;
  end

  assert property (@(posedge clk) disable iff (!rst_n) cnt <= CW'(REQ_DEPTH));
  // Never send a request whose destination is throttled.
  assert property (@(posedge clk) disable iff (!rst_n) fire |-> !held[AW'(sel)]);

endmodule
