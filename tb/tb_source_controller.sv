// tb_source_controller -- self-checking test of the throttling source
// controller (highest-priority instance, so the local condition is live).
//
// The core offers random requests to random sinks; the sink status table
// (decision-tree bit, occupancy, injection rate) changes at random and the
// NoC grants injection slots at random. A reference model keeps the pending
// requests in age order and its own t_avg (EWMA of the gaps between sends)
// and decides, every cycle, which request must be offered: the oldest one
// whose sink is neither flagged by the local condition
// N + lambda * t_avg > N_T nor by the sink's tree bit. The offered packet,
// the hold-back flags and the bypass flag are compared with it, and the
// test requires that local-condition holds, tree holds and bypasses all
// occurred.
module tb_source_controller;
  import cc_pkg::*;
  localparam int unsigned NUM_SINKS = 8, REQ_DEPTH = 8, N_T = 24;

  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, inj_valid, inj_ready, thr_lc, thr_dt, bypass;
  pkt_t req_pkt, inj_pkt;
  sink_status_t status [NUM_SINKS];
  int checks = 0, failures = 0, n_lc = 0, n_dt = 0, n_byp = 0, n_sent = 0;

  source_controller #(.NUM_SINKS(NUM_SINKS), .REQ_DEPTH(REQ_DEPTH), .HIPRI(1'b1),
                      .N_T(N_T), .ALPHA_SHIFT(4)) dut (.*);

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

  pkt_t   q [$];
  longint tavg_acc;
  int     gap;

  function automatic logic lc_of(pkt_t p);
    real lhs;
    lhs = real'(status[p.dst].occ) +
          (real'(status[p.dst].lambda) / 256.0) * (real'(tavg_acc >>> 4) / 256.0);
    return lhs > real'(N_T);
  endfunction

  initial begin
    int exp_sel;
    logic exp_lc, exp_dt;
    req_valid = 0; req_pkt = '0; inj_ready = 0;
    for (int s = 0; s < NUM_SINKS; s++) status[s] = '0;
    tavg_acc = 0; gap = 127;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int c = 0; c < 20000; c++) begin
      // drive
      if ($urandom_range(0, 99) < 8) begin
        int s;
        s = $urandom_range(0, NUM_SINKS-1);
        status[s].cong   = ($urandom_range(0, 99) < 40);
        status[s].occ    = OCC_W'($urandom_range(0, 28));
        status[s].lambda = feat_t'($urandom_range(0, 60));
      end
      req_valid = ($urandom_range(0, 99) < 50);
      req_pkt.src = '0;
      req_pkt.dst = NODE_W'($urandom_range(0, NUM_SINKS-1));
      req_pkt.payload = PAYLOAD_W'(c);
      inj_ready = ($urandom_range(0, 99) < 60);
      #1;
      // expected decision
      exp_sel = -1; exp_lc = 0; exp_dt = 0;
      foreach (q[i]) begin
        logic l, d;
        l = lc_of(q[i]);
        d = !l && status[q[i].dst].cong;
        exp_lc |= l; exp_dt |= d;
        if (!l && !d && exp_sel < 0) exp_sel = i;
      end
      check(req_ready == (q.size() < REQ_DEPTH), "req_ready");
      check(inj_valid == (exp_sel >= 0), "inj_valid");
      if (exp_sel >= 0) check(inj_pkt == q[exp_sel], "offered packet");
      check(thr_lc == exp_lc, "local-condition flag");
      check(thr_dt == exp_dt, "decision-tree flag");
      check(bypass == (inj_ready && exp_sel > 0), "bypass flag");
      n_lc += int'(exp_lc); n_dt += int'(exp_dt);
      @(posedge clk);
      // update model
      if (inj_ready && exp_sel >= 0) begin
        q.delete(exp_sel);
        tavg_acc = tavg_acc + ((((longint'(gap) * 256) << 4) - tavg_acc) >>> 4);
        gap = 1;
        n_sent++;
        if (exp_sel > 0) n_byp++;
      end else if (gap < 127) gap++;
      if (req_valid && req_ready) q.push_back(req_pkt);
      @(negedge clk);
    end
    $display("sent=%0d lc_holds=%0d dt_holds=%0d bypasses=%0d", n_sent, n_lc, n_dt, n_byp);
    check(n_lc > 0, "local condition held requests back");
    check(n_dt > 0, "decision tree held requests back");
    check(n_byp > 0, "younger requests bypassed throttled ones");
    check(n_sent > 1000, "requests flowed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
