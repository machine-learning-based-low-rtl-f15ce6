// feature_unit -- run-time congestion features of one sink ingress queue.
//
// The unit watches the sink queue and keeps the fourteen features of
// cc_pkg::feat_idx_e, each smoothed by an exponentially weighted moving
// average with alpha = 2^-ALPHA_SHIFT (1/16 by default, as in the paper).
// Following the paper, the arrival features are sampled every time a packet
// arrives at the queue, whether it sinks or bounces:
//   * total arrival rate      EWMA of 1/dt, dt = cycles since last arrival
//   * injection rate (sunk)   EWMA of (sunk ? 1/dt : 0)
//   * deflected rate          EWMA of (bounced ? 1/dt : 0)
//   * probability full        EWMA of (bounced ? 1 : 0)
//   * occupancy               EWMA of the occupancy seen by the arrival
//   * CoV^2 of inter-arrival  all arrivals / sunk only / bounced only
//   * gradients               five-point derivative of the smoothed sunk
//                             rate, occupancy, total rate and P(full), one
//                             step per arrival
// The queue-side features are sampled at each departure: mean service time
// (cycles the head waited for the agent, counted from when it became head)
// and CoV^2 of the inter-departure time. The per-packet rate sample 1/dt and
// the zero-weighted sunk/bounced split are this design's way of measuring a
// rate per arrival; the paper names the features but not their arithmetic.
// Times saturate at DT_MAX cycles.
//
// Idle samples (this design's addition, not in the paper): when no packet
// has arrived for IDLE_CYCLES cycles the unit takes a sample as if a packet
// had come and neither sunk nor bounced, with all rate samples 0 and the
// present occupancy. Without it a sink whose sources are all throttled would
// never see another arrival, its features would freeze and the congestion
// signal could stay set forever. Idle samples do not touch the
// inter-arrival statistics.
//
// Interface: arr_valid/arr_sunk describe the arrival this cycle (arr_sunk = 0
// is a bounce), occ is the queue occupancy at the start of the cycle,
// dep_valid marks a packet leaving to the agent.
// Timing: the averages update on the cycle after the event; gradients one
// cycle later still (they push the updated averages).
module feature_unit
  import cc_pkg::*;
#(
  parameter int unsigned ALPHA_SHIFT = 4,
  parameter int unsigned IDLE_CYCLES = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             arr_valid,
  input  logic             arr_sunk,
  input  logic [OCC_W-1:0] occ,
  input  logic             dep_valid,
  output feat_vec_t        feat
);
  logic [6:0] age_any, age_sunk, age_defl, age_dep, age_head;
  logic       arr_defl;
  logic       ev_sunk, ev_defl;
  logic       head_start;
  logic       push_q;
  logic       idle_smp;     // idle sample this cycle
  logic       smp;          // arrival or idle sample
  logic [$clog2(IDLE_CYCLES+1)-1:0] idle_cnt;

  // Cycles since the last sample of either kind.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              idle_cnt <= '0;
    else if (smp)            idle_cnt <= '0;
    else                     idle_cnt <= idle_cnt + 1'b1;
  end
  assign idle_smp = !arr_valid && (idle_cnt == ($clog2(IDLE_CYCLES+1))'(IDLE_CYCLES - 1));
  assign smp      = arr_valid || idle_smp;

  assign arr_defl   = arr_valid && !arr_sunk;
  assign ev_sunk    = arr_valid && arr_sunk;
  assign ev_defl    = arr_defl;
  // A packet sunk into an empty queue becomes head at once.
  assign head_start = ev_sunk && (occ == '0);

  event_age u_age_any  (.clk, .rst_n, .ev(arr_valid), .restart(1'b0),       .age(age_any));
  event_age u_age_sunk (.clk, .rst_n, .ev(ev_sunk),   .restart(1'b0),       .age(age_sunk));
  event_age u_age_defl (.clk, .rst_n, .ev(ev_defl),   .restart(1'b0),       .age(age_defl));
  event_age u_age_dep  (.clk, .rst_n, .ev(dep_valid), .restart(1'b0),       .age(age_dep));
  event_age u_age_head (.clk, .rst_n, .ev(dep_valid), .restart(head_start), .age(age_head));

  // Per-arrival samples (Q7.8).
  logic [15:0] rate_s;      // 1/dt
  logic [15:0] s_sunk, s_defl, s_pfull, s_occ;

  always_comb begin
    rate_s  = arr_valid ? 16'(16'(FEAT_ONE) / 16'(age_any)) : 16'd0;
    s_sunk  = arr_sunk ? rate_s : 16'd0;
    s_defl  = ev_defl  ? rate_s : 16'd0;
    s_pfull = ev_defl  ? 16'(FEAT_ONE) : 16'd0;
    s_occ   = 16'(occ) << FEAT_FRAC;
  end

  function automatic feat_t cyc(input logic [6:0] a);
    return feat_t'(16'(a) << FEAT_FRAC);
  endfunction

  logic [15:0] a_inj_sink, a_inj_tot, a_defl, a_pfull, a_occ, a_svc;
  feat_t       m_unused0, m_unused1, m_unused2, m_unused3;

  ewma #(.W(16), .SHIFT(ALPHA_SHIFT)) u_inj_sink (.clk, .rst_n, .upd(smp), .sample(s_sunk),  .avg(a_inj_sink));
  ewma #(.W(16), .SHIFT(ALPHA_SHIFT)) u_inj_tot  (.clk, .rst_n, .upd(smp), .sample(rate_s),  .avg(a_inj_tot));
  ewma #(.W(16), .SHIFT(ALPHA_SHIFT)) u_defl     (.clk, .rst_n, .upd(smp), .sample(s_defl),  .avg(a_defl));
  ewma #(.W(16), .SHIFT(ALPHA_SHIFT)) u_pfull    (.clk, .rst_n, .upd(smp), .sample(s_pfull), .avg(a_pfull));
  ewma #(.W(16), .SHIFT(ALPHA_SHIFT)) u_occ      (.clk, .rst_n, .upd(smp), .sample(s_occ),   .avg(a_occ));
  ewma #(.W(16), .SHIFT(ALPHA_SHIFT)) u_svc      (.clk, .rst_n, .upd(dep_valid),
                                                  .sample(16'(cyc(age_head))), .avg(a_svc));

  cov_tracker #(.SHIFT(ALPHA_SHIFT)) u_cov_tot  (.clk, .rst_n, .upd(arr_valid), .x(cyc(age_any)),
                                                 .mean(m_unused0), .cov2(feat[F_COV_TOTAL]));
  cov_tracker #(.SHIFT(ALPHA_SHIFT)) u_cov_sink (.clk, .rst_n, .upd(ev_sunk),   .x(cyc(age_sunk)),
                                                 .mean(m_unused1), .cov2(feat[F_COV_SINK]));
  cov_tracker #(.SHIFT(ALPHA_SHIFT)) u_cov_defl (.clk, .rst_n, .upd(ev_defl),   .x(cyc(age_defl)),
                                                 .mean(m_unused2), .cov2(feat[F_COV_DEFL]));
  cov_tracker #(.SHIFT(ALPHA_SHIFT)) u_cov_dep  (.clk, .rst_n, .upd(dep_valid), .x(cyc(age_dep)),
                                                 .mean(m_unused3), .cov2(feat[F_COV_DEP]));

  assign feat[F_INJ_SINK]  = feat_t'(a_inj_sink);
  assign feat[F_INJ_TOTAL] = feat_t'(a_inj_tot);
  assign feat[F_DEFL_RATE] = feat_t'(a_defl);
  assign feat[F_P_FULL]    = feat_t'(a_pfull);
  assign feat[F_OCC]       = feat_t'(a_occ);
  assign feat[F_SVC_MEAN]  = feat_t'(a_svc);

  // Gradients take the averages the cycle after they were updated.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) push_q <= 1'b0;
    else        push_q <= smp;
  end

  five_point_grad u_g_inj  (.clk, .rst_n, .push(push_q), .x(feat_t'(a_inj_sink)), .grad(feat[F_GRAD_INJ]));
  five_point_grad u_g_occ  (.clk, .rst_n, .push(push_q), .x(feat_t'(a_occ)),      .grad(feat[F_GRAD_OCC]));
  five_point_grad u_g_tot  (.clk, .rst_n, .push(push_q), .x(feat_t'(a_inj_tot)),  .grad(feat[F_GRAD_TOTAL]));
  five_point_grad u_g_pf   (.clk, .rst_n, .push(push_q), .x(feat_t'(a_pfull)),    .grad(feat[F_GRAD_PFULL]));

endmodule
