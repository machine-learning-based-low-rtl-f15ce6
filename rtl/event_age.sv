// event_age -- cycles since the previous occurrence of an event, saturating.
//
// age counts the cycles since the last cycle with ev = 1, saturating at
// DT_MAX; it starts saturated after reset (no earlier event). On a cycle with
// ev = 1, age is the inter-event time to sample, and the count restarts so
// that an event on the next cycle reads 1. restart clears the count without
// it being an event (used to start a service interval). Helper of the
// feature unit; measuring times with saturating counters instead of
// timestamps is this design's choice.
//
// Timing: age is registered.
module event_age
  import cc_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       ev,
  input  logic       restart,
  output logic [6:0] age
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)               age <= 7'(DT_MAX);
    else if (ev || restart)   age <= 7'd1;
    else if (age != 7'(DT_MAX)) age <= age + 7'd1;
  end
endmodule
