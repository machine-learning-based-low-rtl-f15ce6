// local_condition -- Little's-law throttle check of a highest-priority source.
//
// Sources at the floorplan boundary have the highest priority in a
// deflection NoC and can inject freely, so they apply a local test besides
// the sink's decision tree. With N the current occupancy of the destination
// queue, lambda the injection rate into it and t_avg the average time
// between two throttling decisions of this source, about lambda * t_avg more
// packets reach the queue before the next decision, so the source throttles
// when
//     N + lambda * t_avg > N_T
// (N_T = target occupancy). This is the paper's rule; for lower-priority
// sources (HIPRI = 0) it always answers 0, also as in the paper. The value of
// N_T (24 of a 32-entry queue) and the Q7.8 formats of lambda and t_avg are
// this design's choices.
//
// Timing: purely combinational.
module local_condition
  import cc_pkg::*;
#(
  parameter bit          HIPRI = 1'b1,
  parameter int unsigned N_T   = 24
) (
  input  logic [OCC_W-1:0] occ,     // N
  input  feat_t            lambda,  // packets/cycle, Q7.8, >= 0
  input  feat_t            t_avg,   // cycles, Q7.8, >= 0
  output logic             throttle
);
  logic [31:0] prod;   // Q14.16
  logic [32:0] lhs;

  always_comb begin
    prod     = 32'(lambda[14:0]) * 32'(t_avg[14:0]);
    lhs      = {10'd0, occ, 16'd0} + 33'(prod);
    throttle = HIPRI && (lhs > 33'(64'(N_T) << 16));
  end

endmodule
