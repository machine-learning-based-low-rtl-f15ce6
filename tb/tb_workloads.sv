// tb_workloads -- workload sweep of the congestion-controlled 6x6 NoC logic.
//
// Uses the same behavioural deflection network and agents as tb_cc_noc_top
// and runs, at the default size, the kinds of workloads the scheme is
// evaluated with: synthetic traffic at LLC hit rates 0.2, 0.5 and 0.7 for a
// low, a medium and a high injection rate, each with the trees disabled
// (leaves 0, only the local condition acting) and with the reset trees; then
// one mixed workload whose injection rate changes over four phases. Misses
// go to the two memory-controller nodes (0 and 35), hits to random cache
// banks. For every run it prints the memory read bandwidth (deliveries at
// the memory controllers per 1000 cycles), the share of completed requests
// that were misses, and the number of bounces. Checked in every run: every
// request delivered exactly once and in order, nothing injected towards a
// flagged sink; over the sweep, bounces and tree hold-backs occurred.
// Sizes are reduced against the paper's 600k-cycle runs: 3000 cycles per
// run plus drain.
module tb_workloads;
  import cc_pkg::*;
  localparam int unsigned MESH_X = 6, MESH_Y = 6, NODES = MESH_X * MESH_Y;
  localparam int unsigned RUN_CYCLES = 3000;
  int unsigned INJ_PCT, MISS_PCT;
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
    #50000000;
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
  int win_del, win_mc;
  int phase_inj [4] = '{5, 12, 8, 15};
  logic mixed;
  int hit_pct [3] = '{20, 50, 70};
  int inj_pct [3] = '{4, 8, 14};
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
        if (gen_on) begin win_del++; if (n == MC0 || n == MC1) win_mc++; end
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
    win_del = 0; win_mc = 0;
    gen_on = 1;
    for (int c = 0; c < RUN_CYCLES; c++) begin
      if (mixed) INJ_PCT = phase_inj[c / (RUN_CYCLES / 4)];
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
    $display("  %-9s inj=%0d%% miss=%0d%%: mem read BW=%0d/1000 cycles, miss share=%0d%%, bounces=%0d",
             r ? "trees" : "no trees", INJ_PCT, MISS_PCT, win_mc * 1000 / RUN_CYCLES,
             (win_del > 0) ? win_mc * 100 / win_del : 0, bounce_run[r]);
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
    mixed = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    foreach (hit_pct[h]) begin
      foreach (inj_pct[i]) begin
        MISS_PCT = 100 - hit_pct[h];
        INJ_PCT  = inj_pct[i];
        $display("hit rate %0d%%, injection %0d%%", hit_pct[h], INJ_PCT);
        program_leaves(16'h0000);
        run(0);
        program_leaves(16'hF000);
        run(1);
      end
    end
    // mixed workload: four injection-rate phases, 70 % hit rate
    mixed = 1; MISS_PCT = 30;
    $display("mixed workload, phases 5/12/8/15 %%, hit rate 70%%");
    program_leaves(16'h0000);
    run(0);
    program_leaves(16'hF000);
    run(1);
    $display("tree holds=%0d lc holds=%0d bypasses=%0d", n_dt, n_lc, n_byp);
    check(n_bounce > 0, "deflections occurred");
    check(n_dt > 0, "tree hold-backs occurred");
    check(n_lc > 0, "local-condition hold-backs occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
