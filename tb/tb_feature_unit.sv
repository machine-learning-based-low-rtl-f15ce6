// tb_feature_unit -- self-checking test of the per-sink feature unit.
//
// Phase 1 drives random arrivals (sunk or bounced, random occupancy) and
// departures and compares, every cycle, the smoothed rate, deflection,
// P(full), occupancy and service-time features and the four gradients with
// an integer reference model written from the feature definitions
// (rate sample 256/dt, EWMA with alpha = 1/16, five-point derivative).
// Phase 2 checks the coefficient-of-variation features against values
// worked out by hand: strictly periodic arrivals give CoV^2 = 0, and
// inter-arrival times alternating 2 and 6 cycles (mean 4, variance 4) give
// CoV^2 = 0.25 = 64 in Q7.8. Phase 3 stops all arrivals and checks that
// the idle samples (one every 64 quiet cycles) pull the rate and P(full)
// features to 0 and the occupancy average to the present occupancy.
module tb_feature_unit;
  import cc_pkg::*;

  logic clk = 0, rst_n = 0;
  logic arr_valid, arr_sunk, dep_valid;
  logic [OCC_W-1:0] occ;
  feat_vec_t feat;
  int checks = 0, failures = 0;

  feature_unit #(.ALPHA_SHIFT(4)) dut (.*);

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

  // ---- reference model ----
  longint cyc;
  longint last_any, last_head;
  logic   have_any;
  longint a_tot, a_sink, a_defl, a_pf, a_occ, a_svc;   // accumulators, 4 extra bits
  longint hist_inj [5], hist_occ [5], hist_tot [5], hist_pf [5];
  logic   push_pending;

  function automatic longint age_of(longint last, logic have);
    longint d;
    if (!have) return 127;
    d = cyc - last;
    return (d > 127) ? 127 : d;
  endfunction

  function automatic longint upd(longint acc, longint x);
    return acc + ((((x << 4) - acc)) >>> 4);
  endfunction

  function automatic longint grad5(longint h [5]);
    return (h[4] - 8*h[3] + 8*h[1] - h[0]) / 12;
  endfunction

  logic have_head;

  int idle_cnt = 0;

  task automatic model_step();
    longint dt, r;
    logic idle;
    idle = !arr_valid && (idle_cnt == 63);
    if (push_pending) begin
      for (int i = 4; i > 0; i--) begin
        hist_inj[i] = hist_inj[i-1]; hist_occ[i] = hist_occ[i-1];
        hist_tot[i] = hist_tot[i-1]; hist_pf[i] = hist_pf[i-1];
      end
      hist_inj[0] = a_sink >>> 4; hist_occ[0] = a_occ >>> 4;
      hist_tot[0] = a_tot >>> 4;  hist_pf[0]  = a_pf >>> 4;
    end
    push_pending = arr_valid || idle;
    idle_cnt = (arr_valid || idle) ? 0 : idle_cnt + 1;
    if (idle) begin
      a_tot  = upd(a_tot, 0);
      a_sink = upd(a_sink, 0);
      a_defl = upd(a_defl, 0);
      a_pf   = upd(a_pf, 0);
      a_occ  = upd(a_occ, longint'(occ) * 256);
    end
    if (arr_valid) begin
      dt = age_of(last_any, have_any);
      r  = 256 / dt;
      a_tot  = upd(a_tot, r);
      a_sink = upd(a_sink, arr_sunk ? r : 0);
      a_defl = upd(a_defl, arr_sunk ? 0 : r);
      a_pf   = upd(a_pf, arr_sunk ? 0 : 256);
      a_occ  = upd(a_occ, longint'(occ) * 256);
      last_any = cyc; have_any = 1;
    end
    if (dep_valid) begin
      a_svc = upd(a_svc, age_of(last_head, have_head) * 256);
      last_head = cyc; have_head = 1;
    end else if (arr_valid && arr_sunk && occ == 0) begin
      last_head = cyc; have_head = 1;
    end
  endtask

  task automatic compare();
    check(feat[F_INJ_TOTAL] == feat_t'(a_tot >>> 4), "total rate");
    check(feat[F_INJ_SINK]  == feat_t'(a_sink >>> 4), "sink rate");
    check(feat[F_DEFL_RATE] == feat_t'(a_defl >>> 4), "deflected rate");
    check(feat[F_P_FULL]    == feat_t'(a_pf >>> 4), "P(full)");
    check(feat[F_OCC]       == feat_t'(a_occ >>> 4), "occupancy");
    check(feat[F_SVC_MEAN]  == feat_t'(a_svc >>> 4), "service time");
    check(feat[F_GRAD_INJ]   == feat_t'(grad5(hist_inj)), "grad inj");
    check(feat[F_GRAD_OCC]   == feat_t'(grad5(hist_occ)), "grad occ");
    check(feat[F_GRAD_TOTAL] == feat_t'(grad5(hist_tot)), "grad total");
    check(feat[F_GRAD_PFULL] == feat_t'(grad5(hist_pf)), "grad pfull");
  endtask

  int pos_grad_occ = 0;

  initial begin
    arr_valid = 0; arr_sunk = 0; dep_valid = 0; occ = '0;
    cyc = 0; have_any = 0; have_head = 0; last_any = 0; last_head = 0;
    a_tot = 0; a_sink = 0; a_defl = 0; a_pf = 0; a_occ = 0; a_svc = 0;
    push_pending = 0;
    for (int i = 0; i < 5; i++) begin
      hist_inj[i] = 0; hist_occ[i] = 0; hist_tot[i] = 0; hist_pf[i] = 0;
    end
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    // Phase 1: random traffic, with quiet stretches that trigger idle samples with a rising then falling occupancy
    for (int c = 0; c < 6000; c++) begin
      arr_valid = ((c % 1500) < 1300) && ($urandom_range(0, 99) < 35);
      occ       = OCC_W'((c % 2000) < 1000 ? (c % 1000) / 32 : 31 - (c % 1000) / 32);
      arr_sunk  = (occ < 28) ? ($urandom_range(0, 99) < 90) : ($urandom_range(0, 99) < 30);
      dep_valid = ($urandom_range(0, 99) < 30);
      @(posedge clk);
      model_step();
      cyc++;
      @(negedge clk);
      compare();
      if (feat[F_GRAD_OCC] > 0) pos_grad_occ++;
    end
    check(pos_grad_occ > 100, "occupancy gradient seen positive");
    // Phase 2a: periodic arrivals every 4 cycles -> CoV^2 of all/sunk -> 0
    arr_valid = 0; dep_valid = 0; arr_sunk = 1; occ = '0;
    for (int c = 0; c < 4 * 300; c++) begin
      arr_valid = (c % 4 == 0);
      dep_valid = (c % 4 == 2);
      arr_sunk  = 1'b1;
      @(posedge clk); @(negedge clk);
    end
    check(feat[F_COV_TOTAL] <= feat_t'(2), "CoV^2 periodic arrivals ~ 0");
    check(feat[F_COV_SINK]  <= feat_t'(2), "CoV^2 periodic sunk arrivals ~ 0");
    check(feat[F_COV_DEP]   <= feat_t'(2), "CoV^2 periodic departures ~ 0");
    check(feat[F_INJ_TOTAL] >= feat_t'(62) && feat[F_INJ_TOTAL] <= feat_t'(64),
          "rate 0.25 packets/cycle");
    // Phase 2b: bounced arrivals alternating gaps of 2 and 6 cycles
    for (int k = 0; k < 400; k++) begin
      for (int c = 0; c < ((k % 2) ? 6 : 2); c++) begin
        arr_valid = (c == 0);
        arr_sunk  = 1'b0;
        dep_valid = 1'b0;
        @(posedge clk); @(negedge clk);
      end
    end
    arr_valid = 0;
    check(feat[F_P_FULL] >= feat_t'(250), "P(full) -> 1 when all bounce");
    // Phase 3: silence, occupancy 3
    occ = OCC_W'(3);
    repeat (64 * 120) begin @(posedge clk); @(negedge clk); end
    check(feat[F_INJ_TOTAL] <= feat_t'(1) && feat[F_DEFL_RATE] <= feat_t'(1) &&
          feat[F_P_FULL] <= feat_t'(1), "idle samples decay the rates");
    check(feat[F_OCC] >= feat_t'(3*256 - 16) && feat[F_OCC] <= feat_t'(3*256), "idle samples track occupancy");
    $display("cov_total=%0d cov_defl=%0d", feat[F_COV_TOTAL], feat[F_COV_DEFL]);
    check(feat[F_COV_TOTAL] >= feat_t'(56) && feat[F_COV_TOTAL] <= feat_t'(72), "CoV^2 total = 0.25");
    check(feat[F_COV_DEFL]  >= feat_t'(56) && feat[F_COV_DEFL]  <= feat_t'(72), "CoV^2 deflected = 0.25");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
