// tb_local_condition -- self-checking test of the Little's-law condition.
//
// Random occupancy N, injection rate lambda and decision interval t_avg are
// applied to a highest-priority instance (HIPRI = 1) and a low-priority one
// (HIPRI = 0). The expected answer is N + lambda * t_avg > N_T evaluated with
// real numbers; the low-priority instance must never throttle. A few hand
// cases sit right at the boundary.
module tb_local_condition;
  import cc_pkg::*;
  localparam int unsigned N_T = 24;

  logic [OCC_W-1:0] occ;
  feat_t lambda, t_avg;
  logic thr_hi, thr_lo;
  int checks = 0, failures = 0, ones = 0;

  local_condition #(.HIPRI(1'b1), .N_T(N_T)) u_hi (.occ, .lambda, .t_avg, .throttle(thr_hi));
  local_condition #(.HIPRI(1'b0), .N_T(N_T)) u_lo (.occ, .lambda, .t_avg, .throttle(thr_lo));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s occ=%0d lambda=%0d t_avg=%0d", what, occ, lambda, t_avg);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(int n, int l, int t);
    real lhs;
    occ = OCC_W'(n); lambda = feat_t'(l); t_avg = feat_t'(t);
    #1;
    lhs = real'(n) + (real'(l) / 256.0) * (real'(t) / 256.0);
    check(thr_hi == (lhs > real'(N_T)), "high-priority source");
    check(thr_lo == 1'b0, "low-priority source never throttles locally");
    if (thr_hi) ones++;
  endtask

  initial begin
    // boundary cases: 20 + 0.5 * 8 = 24 (not above), 20 + 0.5 * 8.00390625 > 24
    apply(20, 128, 8 * 256);
    check(thr_hi == 1'b0, "equal to target does not throttle");
    apply(20, 128, 8 * 256 + 1);
    check(thr_hi == 1'b1, "just above target throttles");
    apply(25, 0, 0);
    check(thr_hi == 1'b1, "occupancy alone above target");
    for (int i = 0; i < 20000; i++)
      apply($urandom_range(0, 32), $urandom_range(0, 256), $urandom_range(0, 40 * 256));
    check(ones > 1000, "throttles in a good share of cases");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
