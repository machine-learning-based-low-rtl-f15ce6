// tb_ingress_queue -- self-checking test of the sink ingress FIFO.
//
// Random arrivals and drains with phases of slow draining so the queue fills
// and packets bounce. A queue in the testbench is the reference: every cycle
// the accept/bounce decision, the head packet, the occupancy and the full
// flag are compared with it. Also counts that bounces actually happened.
module tb_ingress_queue;
  import cc_pkg::*;
  localparam int unsigned DEPTH = 32;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_accept, in_bounce, out_valid, out_ready, full;
  pkt_t in_pkt, out_pkt;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0, bounces = 0, accepts = 0;
  pkt_t model [$];

  ingress_queue #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_pkt = '0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 99) < 60);
      in_pkt   = pkt_t'($urandom);
      // slow drain phases make the queue fill
      out_ready = ((cyc / 500) % 2 == 0) ? ($urandom_range(0, 99) < 20)
                                         : ($urandom_range(0, 99) < 90);
      #1;
      check(count == ($clog2(DEPTH+1))'(model.size()), "count");
      check(full == (model.size() == DEPTH), "full");
      check(in_accept == (in_valid && model.size() < DEPTH), "accept");
      check(in_bounce == (in_valid && model.size() == DEPTH), "bounce");
      check(out_valid == (model.size() != 0), "out_valid");
      if (model.size() != 0) check(out_pkt == model[0], "head packet");
      @(posedge clk);
      if (in_valid && model.size() < DEPTH) begin model.push_back(in_pkt); accepts++; end
      else if (in_valid) bounces++;
      if (out_valid && out_ready) void'(model.pop_front());
    end
    check(bounces > 0, "some packets bounced");
    check(accepts > 1000, "enough packets accepted");
    $display("accepts=%0d bounces=%0d", accepts, bounces);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
