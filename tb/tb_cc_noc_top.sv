// tb_cc_noc_top -- end-to-end test of the congestion-controlled 6x6 NoC
// interface logic, at the default (full) size.
//
// The routers are represented by a behavioural model of a bufferless
// deflection NoC: a packet injected at node s for node d arrives after
// |dx| + |dy| + 2 cycles; at most one packet per cycle tries each sink (the
// oldest one due); a packet that bounces off a full ingress queue circulates
// and tries again 2 * MESH_X cycles later. Injection slots are free 90 % of
// the time. Cores issue requests at a fixed rate; a share MISS of them go to
// the two memory-controller nodes (0 and 35), which drain slowly, the rest to
// random cache banks, which drain fast.
//
// Run 1 programs every tree to "never congested" (leaves all 0) and run 2
// uses the reset trees; both runs are drained to empty. Checked: every
// packet a core hands over is delivered exactly once, to the right sink, and
// leaves the ingress queue in acceptance order; no packet is ever injected
// towards a sink whose status at the sources says congested; a change of a
// sink's congestion bit reaches the sources within 10 cycles; run 2 bounces
// fewer packets than run 1. Each mechanism -- bounce (deflection), tree
// hold-back, local-condition hold-back, bypass of a throttled request, TDM
// update -- must have happened at least once.
module tb_cc_noc_top;
  import cc_pkg::*;
  localparam int unsigned MESH_X = 6, MESH_Y = 6, NODES = MESH_X * MESH_Y;
  localparam int unsigned RUN_CYCLES = 6000;
  localparam int unsigned INJ_PCT = 10, MISS_PCT = 22;
  localparam int unsigned MC0 = 0, MC1 = NODES - 1;

  logic clk = 0, rst_n = 0;
  logic req_valid [NODES], req_ready [NODES];
  pkt_t req_pkt [NODES];
  logic inj_valid [NODES], inj_ready [NODES];
  pkt_t inj_pkt [NODES];
  logic arr_valid [NODES], arr_accept [NODES], arr_bounce [NODES];
  pkt_t arr_pkt [NODES];
  logic srv_valid [NODES], srv_ready [NODES];
  pkt_t srv_pkt [NODES];
  logic [NODE_W-1:0] cfg_sink;
  logic cfg_node_we, cfg_leaf_we;
  logic [3:0] cfg_node_idx;
  dt_node_t cfg_node;
  logic [15:0] cfg_leaves;
  logic sink_cong [NODES], thr_lc [NODES], thr_dt [NODES], bypass [NODES];

  cc_noc_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- behavioural NoC ----------------
  typedef struct { pkt_t p; longint due; } flight_t;
  flight_t flight [$];
  int      present_idx [NODES];
  longint  now = 0;

  function automatic int lat(int s, int d);
    int dx, dy;
    dx = (s % MESH_X) - (d % MESH_X); if (dx < 0) dx = -dx;
    dy = (s / MESH_X) - (d / MESH_X); if (dy < 0) dy = -dy;
    return dx + dy + 2;
  endfunction

  // ---------------- scoreboard ----------------
  int       pending_ids [int];          // handed to a core, not yet delivered
  pkt_t     sinkq [NODES][$];           // accepted, not yet drained
  int unsigned seq [NODES];
  int n_handed, n_delivered, n_bounce, n_dt, n_lc, n_byp, n_cong_rise, n_tdm;
  int bounce_run [2];
  int tdm_wait [NODES];
  logic prev_cong [NODES];
  logic gen_on;

  function automatic int key(pkt_t p);
    return int'(p.src) * 65536 + int'(p.payload);
  endfunction

  task automatic program_leaves(logic [15:0] lv);
    for (int s = 0; s < NODES; s++) begin
      @(negedge clk);
      cfg_sink = NODE_W'(s); cfg_leaf_we = 1; cfg_leaves = lv;
    end
    @(negedge clk);
    cfg_leaf_we = 0;
  endtask

  // drive one cycle of cores, network and agents
  task automatic drive();
    for (int n = 0; n < NODES; n++) begin
      // cores
      if (!req_valid[n] || req_ready[n]) begin
        req_valid[n] = gen_on && ($urandom_range(0, 99) < INJ_PCT);
        req_pkt[n].src = NODE_W'(n);
        if ($urandom_range(0, 99) < MISS_PCT)
          req_pkt[n].dst = NODE_W'(($urandom_range(0, 1) == 0) ? MC0 : MC1);
        else
          req_pkt[n].dst = NODE_W'($urandom_range(0, NODES-1));
        req_pkt[n].payload = PAYLOAD_W'(seq[n]);
      end
      inj_ready[n] = ($urandom_range(0, 99) < 90);
      srv_ready[n] = (n == MC0 || n == MC1) ? ($urandom_range(0, 99) < 30)
                                            : ($urandom_range(0, 99) < 60);
      // network: present the oldest due packet for this sink
      present_idx[n] = -1;
      arr_valid[n] = 0;
      arr_pkt[n] = '0;
    end
    foreach (flight[i]) begin
      int d;
      d = int'(flight[i].p.dst);
      if (flight[i].due <= now && present_idx[d] < 0) begin
        present_idx[d] = i;
        arr_valid[d] = 1;
        arr_pkt[d] = flight[i].p;
      end
    end
  endtask

  task automatic sample_and_update();
    int remove [$];
    for (int n = 0; n < NODES; n++) begin
      // core hand-over
      if (req_valid[n] && req_ready[n]) begin
        pending_ids[key(req_pkt[n])] = 1;
        seq[n]++;
        n_handed++;
      end
      // injection: must not target a sink flagged at the sources
      if (inj_valid[n] && inj_ready[n]) begin
        check(!dut.st_src[inj_pkt[n].dst].cong, "no injection towards a congested sink");
        check(inj_pkt[n].src == NODE_W'(n), "source id");
        flight.push_back('{p: inj_pkt[n], due: now + lat(n, int'(inj_pkt[n].dst))});
      end
      // sink side
      if (arr_valid[n]) begin
        check(arr_accept[n] != arr_bounce[n], "accept xor bounce");
        if (arr_accept[n]) begin
          sinkq[n].push_back(arr_pkt[n]);
          remove.push_back(present_idx[n]);
        end else begin
          flight[present_idx[n]].due = now + 2 * MESH_X;
          n_bounce++;
        end
      end
      if (srv_valid[n] && srv_ready[n]) begin
        check(sinkq[n].size() > 0 && srv_pkt[n] == sinkq[n][0], "drain order");
        check(srv_pkt[n].dst == NODE_W'(n), "delivered to the right sink");
        check(pending_ids.exists(key(srv_pkt[n])), "delivered once");
        pending_ids.delete(key(srv_pkt[n]));
        if (sinkq[n].size() > 0) void'(sinkq[n].pop_front());
        n_delivered++;
      end
      n_dt  += int'(thr_dt[n]);
      n_lc  += int'(thr_lc[n]);
      n_byp += int'(bypass[n]);
    end
    remove.rsort();
    foreach (remove[i]) flight.delete(remove[i]);
  endtask

  // congestion bit propagation over the distress channel
  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < NODES; n++) begin
      if (sink_cong[n] != prev_cong[n]) begin
        if (sink_cong[n]) n_cong_rise++;
        tdm_wait[n] = 0;
      end
      if (tdm_wait[n] >= 0) begin
        if (dut.st_src[n].cong == sink_cong[n]) begin
          tdm_wait[n] = -1;
          n_tdm++;
        end else begin
          tdm_wait[n]++;
          if (tdm_wait[n] > 11) begin
            check(0, "status reaches the sources within 10 cycles");
            tdm_wait[n] = -1;
          end
        end
      end
      prev_cong[n] = sink_cong[n];
    end
  end

  task automatic run(int r);
    int b0;
    b0 = n_bounce;
    gen_on = 1;
    for (int c = 0; c < RUN_CYCLES; c++) begin
      drive(); #1;
      @(posedge clk);
      sample_and_update();
      now++;
      @(negedge clk);
    end
    gen_on = 0;
    for (int c = 0; c < 20000 && (pending_ids.size() > 0); c++) begin
      drive(); #1;
      @(posedge clk);
      sample_and_update();
      now++;
      @(negedge clk);
    end
    bounce_run[r] = n_bounce - b0;
    check(pending_ids.size() == 0, "all packets delivered after drain");
    $display("run %0d: handed=%0d delivered=%0d bounces=%0d pending=%0d",
             r, n_handed, n_delivered, bounce_run[r], pending_ids.size());
  endtask

  initial begin
    n_handed = 0; n_delivered = 0; n_bounce = 0; n_dt = 0; n_lc = 0; n_byp = 0;
    n_cong_rise = 0; n_tdm = 0; gen_on = 0;
    cfg_sink = '0; cfg_node_we = 0; cfg_leaf_we = 0; cfg_node_idx = '0;
    cfg_node = '0; cfg_leaves = '0;
    for (int n = 0; n < NODES; n++) begin
      seq[n] = 0; prev_cong[n] = 0; tdm_wait[n] = -1;
      req_valid[n] = 0; req_pkt[n] = '0; inj_ready[n] = 0;
      arr_valid[n] = 0; arr_pkt[n] = '0; srv_ready[n] = 0;
    end
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    // run 0: trees disabled (only the local condition acts)
    program_leaves(16'h0000);
    run(0);
    // run 1: reset trees restored
    program_leaves(16'hF000);
    run(1);
    $display("bounces without trees=%0d with trees=%0d", bounce_run[0], bounce_run[1]);
    $display("tree holds=%0d lc holds=%0d bypasses=%0d cong rises=%0d tdm updates=%0d",
             n_dt, n_lc, n_byp, n_cong_rise, n_tdm);
    check(n_bounce > 0,    "mechanism: bounce / deflection");
    check(n_dt > 0,        "mechanism: decision-tree hold-back");
    check(n_lc > 0,        "mechanism: local-condition hold-back");
    check(n_byp > 0,       "mechanism: bypass of a throttled request");
    check(n_cong_rise > 0, "mechanism: congestion predicted");
    check(n_tdm > 0,       "mechanism: status carried by the channel");
    check(bounce_run[1] < bounce_run[0], "trees reduce deflections");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
