// ingress_queue -- sink ingress FIFO of a bufferless (deflection) NoC.
//
// A packet that reaches its destination tries to sink: if the queue is not
// full it is written (in_accept), otherwise it bounces (in_bounce) and the
// network carries it on, as a deflected packet, until it comes back. The
// receiving agent (cache bank or memory controller) drains the queue through
// a valid/ready port. Full is judged on the occupancy at the start of the
// cycle, so a packet arriving at a full queue bounces even if the head leaves
// in the same cycle. Write and drain may happen in the same cycle. The depth
// default of 32 is the queue size used as the example in the paper; the
// full-at-start-of-cycle rule and the drain handshake are this design's
// choices.
//
// Timing: in_accept/in_bounce are combinational from in_valid; a written
// packet is visible on out_* the next cycle. count is registered.
module ingress_queue
  import cc_pkg::*;
#(
  parameter int unsigned DEPTH = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  pkt_t                       in_pkt,
  output logic                       in_accept,
  output logic                       in_bounce,
  output logic                       out_valid,
  output pkt_t                       out_pkt,
  input  logic                       out_ready,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic                       full
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  pkt_t          mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic          do_deq;

  assign full      = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign in_accept = in_valid && !full;
  assign in_bounce = in_valid && full;
  assign out_valid = (count != '0);
  assign out_pkt   = mem[rd_ptr];
  assign do_deq    = out_valid && out_ready;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (in_accept) wr_ptr <= inc(wr_ptr);
      if (do_deq)    rd_ptr <= inc(rd_ptr);
      case ({in_accept, do_deq})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (in_accept) mem[wr_ptr] <= in_pkt;
  end

  // A bounce only ever happens at a full queue, an accept never does.
  assert property (@(posedge clk) disable iff (!rst_n) in_bounce |-> full);
  assert property (@(posedge clk) disable iff (!rst_n) count <= ($clog2(DEPTH+1))'(DEPTH));

endmodule
