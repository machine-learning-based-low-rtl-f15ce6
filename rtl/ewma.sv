// ewma -- exponentially weighted moving average of a non-negative sample.
//
// On every cycle with upd = 1 the average moves towards the sample by a
// fraction alpha = 2^-SHIFT:  avg_i = alpha * x_i + (1 - alpha) * avg_{i-1},
// the smoothing of the paper's Eq. (1). alpha = 1/16 (SHIFT = 4) is the
// paper's value. The accumulator keeps SHIFT extra fraction bits so that small
// steps are not lost to truncation; avg is its rounded-down upper part. The
// average starts at 0 after reset (the paper does not give a start value).
//
// Timing: avg is registered and reflects the sample one cycle after upd.
module ewma #(
  parameter int unsigned W     = 16,
  parameter int unsigned SHIFT = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         upd,
  input  logic [W-1:0] sample,
  output logic [W-1:0] avg
);
  logic        [W+SHIFT-1:0] acc;
  logic signed [W+SHIFT+1:0] diff;
  logic signed [W+SHIFT+1:0] step;

  always_comb begin
    diff = $signed({2'b00, sample, {SHIFT{1'b0}}}) - $signed({2'b00, acc});
    step = diff >>> SHIFT;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   acc <= '0;
    else if (upd) acc <= (W+SHIFT)'($signed({2'b00, acc}) + step);
  end

  assign avg = acc[W+SHIFT-1:SHIFT];

endmodule
