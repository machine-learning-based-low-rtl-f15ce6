// cov_tracker -- smoothed mean and squared coefficient of variation of an
// inter-event time.
//
// Each sample x (a time in cycles, Q7.8) updates two moving averages with the
// same alpha: the mean m = EWMA(x) and the second moment q = EWMA(x^2). The
// variance is v = q - m^2 (clamped at 0) and the output is
//   cov2 = v / m^2,
// the square of the coefficient of variation, in Q7.8 and saturated. The
// paper lists coefficients of variation among the features; giving the square
// (which orders the same way and needs no square root) is this design's
// choice, as is computing it with one divider.
//
// Timing: m and cov2 follow a sample one cycle after upd; cov2 is
// combinational from the two registered averages.
module cov_tracker
  import cc_pkg::*;
#(
  parameter int unsigned SHIFT = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  upd,
  input  feat_t x,        // non-negative, Q7.8
  output feat_t mean,
  output feat_t cov2
);
  logic [15:0] m_u;
  logic [31:0] q_u;       // Q14.16
  logic [31:0] x2;
  logic [31:0] m2;
  logic [31:0] var_q;
  logic [47:0] ratio;

  assign x2 = 32'(x[15:0]) * 32'(x[15:0]);

  ewma #(.W(16), .SHIFT(SHIFT)) u_mean (
    .clk, .rst_n, .upd, .sample(x[15:0]), .avg(m_u)
  );
  ewma #(.W(32), .SHIFT(SHIFT)) u_sq (
    .clk, .rst_n, .upd, .sample(x2), .avg(q_u)
  );

  always_comb begin
    m2    = 32'(m_u) * 32'(m_u);
    var_q = (q_u > m2) ? (q_u - m2) : 32'd0;
    ratio = (m2 == 32'd0) ? 48'd0 : ({var_q, 16'd0} >> (16 - FEAT_FRAC)) / 48'(m2);
    mean  = feat_t'(m_u);
    cov2  = (ratio > 48'(FEAT_MAX)) ? FEAT_MAX : feat_t'(ratio);
  end

endmodule
