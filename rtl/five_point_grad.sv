// five_point_grad -- gradient of a feature by the five-point derivative.
//
// The last five values of a (smoothed) feature are kept, newest first
// s0..s4, and the derivative at the middle sample is
//   g = (s4 - 8*s3 + 8*s1 - s0) / 12
// per sample step, the standard five-point central difference. The paper
// states that a five-point derivative is used for the gradient features; the
// step (one sample = one packet arrival at the sink) and the integer division
// rounding toward zero are this design's choices. Until five values have been
// seen the missing ones read as 0.
//
// Timing: push shifts x in; grad is combinational from the stored values, so
// it reflects a pushed value from the next cycle on.
module five_point_grad
  import cc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  push,
  input  feat_t x,
  output feat_t grad
);
  feat_t s [5];
  logic signed [23:0] num;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 5; i++) s[i] <= '0;
    end else if (push) begin
      s[0] <= x;
      for (int i = 1; i < 5; i++) s[i] <= s[i-1];
    end
  end

  always_comb begin
    num  = 24'(s[4]) - 24'(s[3]) * 8 + 24'(s[1]) * 8 - 24'(s[0]);
    grad = sat_feat(48'(num / 24'sd12));
  end

endmodule
