// tb_sink_monitor -- self-checking test of one sink's congestion predictor.
//
// Traffic comes in bursts against a slow receiving agent, so the queue
// fills, packets bounce and the tree fires. Checked every cycle against
// references kept in the testbench: accept/bounce and the head packet
// against a model queue, the published occupancy against the model count,
// the published lambda against the injection-rate feature, and the tree bit
// against the reset tree's rule (occupancy > 16 and injection-rate gradient
// > 0) applied to the previous cycle's features. Counts how often the tree
// raised the congestion signal while the queue still had room.
module tb_sink_monitor;
  import cc_pkg::*;
  localparam int unsigned DEPTH = 32;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_accept, in_bounce, out_valid, out_ready;
  pkt_t in_pkt, out_pkt;
  logic cfg_node_we = 0, cfg_leaf_we = 0;
  logic [3:0] cfg_node_idx = '0;
  dt_node_t cfg_node = '0;
  logic [15:0] cfg_leaves = '0;
  sink_status_t status;
  feat_vec_t feat;
  int checks = 0, failures = 0, early = 0, cong_cycles = 0, bounces = 0;
  pkt_t model [$];
  logic exp_cong;

  sink_monitor #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_pkt = '0; out_ready = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int c = 0; c < 12000; c++) begin
      // 300-cycle bursts at 80 % load, then 300 idle-ish cycles
      in_valid  = ((c / 300) % 2 == 0) ? ($urandom_range(0, 99) < 80)
                                       : ($urandom_range(0, 99) < 10);
      in_pkt    = pkt_t'($urandom);
      out_ready = ($urandom_range(0, 99) < 35);
      #1;
      check(in_accept == (in_valid && model.size() < DEPTH), "accept");
      check(in_bounce == (in_valid && model.size() == DEPTH), "bounce");
      check(status.occ == OCC_W'(model.size()), "published occupancy");
      check(status.lambda == feat[F_INJ_SINK], "published lambda");
      if (model.size() != 0) check(out_pkt == model[0], "head packet");
      exp_cong = (feat[F_OCC] > feat_t'(16 * 256)) && (feat[F_GRAD_INJ] > 0);
      @(posedge clk);
      if (in_valid && model.size() < DEPTH) model.push_back(in_pkt);
      else if (in_valid) bounces++;
      if (out_valid && out_ready) void'(model.pop_front());
      #1;
      check(status.cong == exp_cong, "tree output follows features");
      if (status.cong) begin
        cong_cycles++;
        if (model.size() < DEPTH) early++;
      end
      @(negedge clk);
    end
    $display("bounces=%0d cong_cycles=%0d cong_with_room=%0d", bounces, cong_cycles, early);
    check(bounces > 0, "queue overflowed and bounced");
    check(cong_cycles > 0, "congestion predicted");
    check(early > 0, "congestion flagged while the queue had room");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
