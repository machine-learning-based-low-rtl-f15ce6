// distress_channel -- time-division-multiplexed broadcast of sink status.
//
// The channel carries every sink's status (decision-tree bit, occupancy and
// smoothed injection rate) to the sources over a dedicated narrow link. Time
// is divided into slots: in slot k the LANES sinks k*LANES .. k*LANES+LANES-1
// drive the link, so a frame of FRAME = ceil(NUM_SINKS/LANES) slots visits
// every sink once. The slot word then crosses PIPE register stages (the wire
// length across the die) and is written into the status table the sources
// read. The delay from a status change to the table is therefore
// deterministic per sink and at most FRAME + PIPE cycles: 6 + 4 = 10 with the
// defaults, matching the "about 10 cycles" the paper quotes for its
// time-multiplexed distress channel. The lane count, pipeline depth and
// payload are this design's choices. The table resets to "not congested,
// empty".
//
// Timing: status_out is registered; see above for the delay.
module distress_channel
  import cc_pkg::*;
#(
  parameter int unsigned NUM_SINKS = 36,
  parameter int unsigned LANES     = 6,
  parameter int unsigned PIPE      = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  sink_status_t status_in  [NUM_SINKS],
  output sink_status_t status_out [NUM_SINKS]
);
  localparam int unsigned FRAME = (NUM_SINKS + LANES - 1) / LANES;
  localparam int unsigned SW    = (FRAME > 1) ? $clog2(FRAME) : 1;

  typedef struct packed {
    logic         valid;
    logic [SW-1:0] slot;
  } slot_hdr_t;

  logic [SW-1:0] slot_q;
  slot_hdr_t     hdr  [PIPE+1];
  sink_status_t  lane [PIPE+1][LANES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                         slot_q <= '0;
    else if (slot_q == SW'(FRAME - 1))  slot_q <= '0;
    else                                slot_q <= slot_q + 1'b1;
  end

  // Stage 0: the sinks of the current slot drive the lanes.
  always_comb begin
    hdr[0].valid = 1'b1;
    hdr[0].slot  = slot_q;
    for (int l = 0; l < LANES; l++) begin
      int unsigned s;
      s = 32'(slot_q) * LANES + l;
      lane[0][l] = (s < NUM_SINKS) ? status_in[s] : '0;
    end
  end

  for (genvar p = 0; p < PIPE; p++) begin : g_pipe
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        hdr[p+1] <= '0;
        for (int l = 0; l < LANES; l++) lane[p+1][l] <= '0;
      end else begin
        hdr[p+1] <= hdr[p];
        for (int l = 0; l < LANES; l++) lane[p+1][l] <= lane[p][l];
      end
    end
  end

  // Receiver: each table entry listens for its own slot and lane.
  for (genvar s = 0; s < NUM_SINKS; s++) begin : g_rx
    localparam int unsigned MY_SLOT = s / LANES;
    localparam int unsigned MY_LANE = s % LANES;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)
        status_out[s] <= '0;
      else if (hdr[PIPE].valid && hdr[PIPE].slot == SW'(MY_SLOT))
        status_out[s] <= lane[PIPE][MY_LANE];
    end
  end

endmodule
