// tb_mab_core: self-checking test of the complete multi-armed-bandit learner (IPU, four
// reconfigurable QF regions, selection tree, output multiplexer).
//
// The testbench acts as the processor: INIT word, then one feedback word per slot with a
// random reward drawn around the chosen arm's mean, waiting for the next arm each time.
// It keeps its own statistics in double precision and checks:
//  - INIT: the first K picks visit every active arm exactly once, with learn low;
//  - LEARN: the picked arm's quality factor (computed here with the exact formula for the
//    algorithm configured in that arm's region) is within 0.15*max + 0.12 of the best arm's;
//  - arms at or above k_active (blank regions) are never picked;
//  - in a long UCB run the arm with the highest mean is picked most often.
// Runs: UCB K=5, UCB_V K=5, UCB_T K=3, a mixed configuration (regions differ), UCB K=4, K=1.
module tb_mab_core;
  import mab_pkg::*;
  localparam int K_MAX = 5, WL = 11, CNT_W = 16, F = WL - INT_BITS;
  localparam int IDX_W = $clog2(K_MAX + 1), RW = FB_W - IDX_W - 1;
  localparam real LSB = 1.0 / real'(1 << F);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [IDX_W-1:0] k_active, sel_idx;
  rr_cfg_e rr_cfg [K_MAX];
  logic [WL-1:0] alpha, alpha1, alpha2, sel_q;
  logic fb_valid, sel_valid, learn, busy;
  logic [FB_W-1:0] fb_data;

  mab_core dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  real mu [K_MAX] = '{0.3, 0.8, 0.5, 0.65, 0.4};
  real sx [K_MAX], sy [K_MAX];
  int  st [K_MAX], picks [K_MAX];
  int  n;

  function automatic real qref(input int k, input rr_cfg_e c);
    real m, v, ln_n, a, a1, a2;
    if (st[k] == 0) return 1.0e9;
    m = sx[k] / st[k];
    v = sy[k] / st[k] - m * m;
    if (v < 0.0) v = 0.0;
    ln_n = $ln(real'(n));
    a = real'(alpha) * LSB; a1 = real'(alpha1) * LSB; a2 = real'(alpha2) * LSB;
    case (c)
      RR_UCB:  return m + $sqrt(a * ln_n / st[k]);
      RR_UCBV: return m + $sqrt(a1 * ln_n * v / st[k]) + a2 * ln_n / st[k];
      RR_UCBT: return v + $sqrt(a * ln_n / st[k]);
      default: return -1.0;
    endcase
  endfunction

  task automatic wait_sel(output int idx);
    int guard;
    guard = 0;
    while (!sel_valid && guard < 100) begin
      @(negedge clk);
      guard++;
    end
    check(sel_valid, "arm selected");
    idx = int'(sel_idx);
    @(negedge clk);
  endtask

  task automatic run(input int k, input rr_cfg_e c [K_MAX], input int slots, input bit check_best);
    int idx, best;
    bit seen [K_MAX];
    real r, qb, qs;
    logic [RW-1:0] rw;
    k_active = IDX_W'(k);
    rr_cfg = c;
    for (int i = 0; i < K_MAX; i++) begin sx[i] = 0; sy[i] = 0; st[i] = 0; picks[i] = 0; seen[i] = 0; end
    n = 1;
    @(negedge clk);
    fb_data = FB_W'(1) << IDX_W; fb_valid = 1'b1;
    @(negedge clk);
    fb_valid = 1'b0;
    wait_sel(idx);
    for (int s = 0; s < slots; s++) begin
      check(idx >= 1 && idx <= k, $sformatf("pick %0d outside 1..%0d", idx, k));
      if (idx < 1 || idx > k) idx = 1;
      if (s < k) begin
        check(!learn && !seen[idx-1], $sformatf("INIT pick %0d", idx));
        seen[idx-1] = 1;
      end else begin
        check(learn, "LEARN mode");
        qb = -1.0;
        for (int i = 0; i < k; i++) if (qref(i, c[i]) > qb) qb = qref(i, c[i]);
        qs = qref(idx - 1, c[idx-1]);
        if (qb > 31.0) qb = 31.0;
        if (qs > 31.0) qs = 31.0;
        check(qs >= qb - 0.15 * qb - 0.12,
              $sformatf("slot %0d picked arm %0d with Q=%f, best Q=%f", s, idx, qs, qb));
      end
      picks[idx-1]++;
      r = mu[idx-1] + 0.15 * (real'($urandom_range(0, 2000)) / 1000.0 - 1.0);
      if (r < 0.0) r = 0.0;
      if (r > 0.999) r = 0.999;
      rw = RW'($rtoi(r * real'(1 << RW)));
      r = real'(rw[RW-1 -: F]) * LSB;
      sx[idx-1] += r;
      sy[idx-1] += real'((int'(rw[RW-1 -: F]) * int'(rw[RW-1 -: F])) >> F) * LSB;
      st[idx-1] += 1;
      n += 1;
      @(negedge clk);
      fb_data = {rw, 1'b0, IDX_W'(idx)}; fb_valid = 1'b1;
      @(negedge clk);
      fb_valid = 1'b0;
      wait_sel(idx);
    end
    for (int i = 0; i < k; i++) check(seen[i], "every arm visited in INIT");
    if (check_best) begin
      best = 0;
      for (int i = 1; i < k; i++) if (picks[i] > picks[best]) best = i;
      check(best == 1, $sformatf("most picked arm %0d, expected 2", best + 1));
    end
    $display("run K=%0d picks %0d %0d %0d %0d %0d", k, picks[0], picks[1], picks[2], picks[3], picks[4]);
  endtask

  initial begin
    rr_cfg_e c [K_MAX];
    fb_valid = 0; fb_data = '0; k_active = IDX_W'(K_MAX);
    alpha = WL'(1 << F); alpha1 = WL'(1 << F); alpha2 = WL'(1 << (F - 2));
    for (int i = 0; i < K_MAX; i++) rr_cfg[i] = RR_UCB;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    c = '{RR_UCB, RR_UCB, RR_UCB, RR_UCB, RR_UCB};      run(5, c, 400, 1'b1);
    c = '{RR_UCBV, RR_UCBV, RR_UCBV, RR_UCBV, RR_UCBV}; run(5, c, 200, 1'b0);
    c = '{RR_UCBT, RR_UCBT, RR_UCBT, RR_UCB, RR_UCB};   run(3, c, 200, 1'b0);
    c = '{RR_UCB, RR_UCBT, RR_UCBV, RR_UCB, RR_UCBT};   run(5, c, 200, 1'b0);
    c = '{RR_UCB, RR_UCB, RR_UCB, RR_UCB, RR_UCB};      run(4, c, 100, 1'b1);
    c = '{RR_UCB, RR_UCB, RR_UCB, RR_UCB, RR_UCB};      run(1, c, 20, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
