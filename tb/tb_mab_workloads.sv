// tb_mab_workloads: the channel-selection experiments of the paper's evaluation, run on the
// bandit learner alone.
//
// Each experiment resets the learner with an INIT word and plays N = 10000 slots. The reward
// of a slot is a Gaussian sample with the chosen channel's mean and variance, clipped to
// [0, 1). Distributions (mean, variance):
//   mu1 (K=5): (0.5,0.01) (0.8,0.02) (0.61,0.08) (0.45,0.06) (0.9,0.07)   best channel 5
//   mu2 (K=5): (0.55,0.04) (0.48,0.14) (0.8,0.2) (0.72,0.3) (0.61,0.2)    best channel 3
//   mu3 (K=7): (0.4,0.01) (0.45,0.02) (0.35,0.08) (0.33,0.06) (0.37,0.07) (0.46,0.2) (0.38,0.1)
//   mu4 (K=7): (0.95,0.03) (0.92,0.08) (0.88,0.1) (0.87,0.15) (0.9,0.1) (0.98,0.01) (0.82,0.1)
// The K = 5 sets run on the default-size learner (K_MAX = 5) with UCB, UCB_V and UCB_T; the
// K = 7 sets need a larger learner, instantiated here with K_MAX = 7 and UCB. Checks: every
// pick in range; the best channel picked most often for mu1 and mu2 with UCB; for the close
// means of mu3 and mu4 the best channel must be among the two most-picked. Pick counts are
// printed for comparison with the paper's plots.
module tb_mab_workloads;
  import mab_pkg::*;
  localparam int WL = 11, F = WL - INT_BITS, N = 10000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  logic [WL-1:0] alpha, alpha1, alpha2;

  // learner with the default size
  localparam int KA = 5, IA = $clog2(KA + 1);
  logic [IA-1:0] ka_active, sa_idx;
  rr_cfg_e cfg_a [KA];
  logic fa_valid, sa_valid, la, ba;
  logic [FB_W-1:0] fa_data;
  logic [WL-1:0] qa;
  mab_core u_a (.clk, .rst_n, .k_active(ka_active), .rr_cfg(cfg_a), .alpha, .alpha1, .alpha2,
                .fb_valid(fa_valid), .fb_data(fa_data), .sel_valid(sa_valid), .sel_idx(sa_idx),
                .sel_q(qa), .learn(la), .busy(ba));

  // learner with seven arms
  localparam int KB = 7, IB = $clog2(KB + 1);
  logic [IB-1:0] kb_active, sb_idx;
  rr_cfg_e cfg_b [KB];
  logic fb_v, sb_valid, lb, bb;
  logic [FB_W-1:0] fb_d;
  logic [WL-1:0] qb;
  mab_core #(.K_MAX(KB)) u_b (.clk, .rst_n, .k_active(kb_active), .rr_cfg(cfg_b), .alpha,
                .alpha1, .alpha2, .fb_valid(fb_v), .fb_data(fb_d), .sel_valid(sb_valid),
                .sel_idx(sb_idx), .sel_q(qb), .learn(lb), .busy(bb));

  function automatic real gauss();
    real u1, u2;
    u1 = real'($urandom_range(1, 1000000)) / 1000000.0;
    u2 = real'($urandom_range(0, 1000000)) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307 * u2);
  endfunction

  function automatic real draw(input real m, input real v);
    real r;
    r = m + $sqrt(v) * gauss();
    if (r < 0.0) r = 0.0;
    if (r > 0.999) r = 0.999;
    return r;
  endfunction

  int picks [7];

  // one experiment on the 5-arm learner
  task automatic run_a(input string name, input real m [5], input real v [5], input rr_cfg_e alg,
                       input int best, input bit must_win);
    int idx, top;
    localparam int RWA = FB_W - IA - 1;
    logic [RWA-1:0] rw;
    ka_active = IA'(KA);
    for (int i = 0; i < KA; i++) cfg_a[i] = alg;
    for (int i = 0; i < 7; i++) picks[i] = 0;
    @(negedge clk); fa_data = FB_W'(1) << IA; fa_valid = 1; @(negedge clk); fa_valid = 0;
    for (int s = 0; s < N; s++) begin
      while (!sa_valid) @(negedge clk);
      idx = int'(sa_idx);
      @(negedge clk);
      check(idx >= 1 && idx <= KA, "pick in range");
      if (idx < 1 || idx > KA) idx = 1;
      picks[idx-1]++;
      rw = RWA'($rtoi(draw(m[idx-1], v[idx-1]) * real'(1 << RWA)));
      fa_data = {rw, 1'b0, IA'(idx)}; fa_valid = 1; @(negedge clk); fa_valid = 0;
    end
    while (!sa_valid) @(negedge clk);
    @(negedge clk);
    top = 0;
    for (int i = 1; i < KA; i++) if (picks[i] > picks[top]) top = i;
    $display("%s %s: picks %0d %0d %0d %0d %0d", name, alg.name(), picks[0], picks[1], picks[2],
             picks[3], picks[4]);
    if (must_win) check(top == best - 1, $sformatf("%s: channel %0d picked most, expected %0d",
                                                   name, top + 1, best));
  endtask

  task automatic run_b(input string name, input real m [7], input real v [7], input int best);
    int idx, n_above;
    localparam int RWB = FB_W - IB - 1;
    logic [RWB-1:0] rw;
    kb_active = IB'(KB);
    for (int i = 0; i < KB; i++) cfg_b[i] = RR_UCB;
    for (int i = 0; i < 7; i++) picks[i] = 0;
    @(negedge clk); fb_d = FB_W'(1) << IB; fb_v = 1; @(negedge clk); fb_v = 0;
    for (int s = 0; s < N; s++) begin
      while (!sb_valid) @(negedge clk);
      idx = int'(sb_idx);
      @(negedge clk);
      check(idx >= 1 && idx <= KB, "pick in range");
      if (idx < 1 || idx > KB) idx = 1;
      picks[idx-1]++;
      rw = RWB'($rtoi(draw(m[idx-1], v[idx-1]) * real'(1 << RWB)));
      fb_d = {rw, 1'b0, IB'(idx)}; fb_v = 1; @(negedge clk); fb_v = 0;
    end
    while (!sb_valid) @(negedge clk);
    @(negedge clk);
    n_above = 0;
    for (int i = 0; i < KB; i++) if (picks[i] > picks[best-1]) n_above++;
    $display("%s RR_UCB: picks %0d %0d %0d %0d %0d %0d %0d", name, picks[0], picks[1], picks[2],
             picks[3], picks[4], picks[5], picks[6]);
    check(n_above <= 1, $sformatf("%s: best channel %0d not among the two most picked", name, best));
  endtask

  initial begin
    real m1 [5] = '{0.5, 0.8, 0.61, 0.45, 0.9};
    real v1 [5] = '{0.01, 0.02, 0.08, 0.06, 0.07};
    real m2 [5] = '{0.55, 0.48, 0.8, 0.72, 0.61};
    real v2 [5] = '{0.04, 0.14, 0.2, 0.3, 0.2};
    real m3 [7] = '{0.4, 0.45, 0.35, 0.33, 0.37, 0.46, 0.38};
    real v3 [7] = '{0.01, 0.02, 0.08, 0.06, 0.07, 0.2, 0.1};
    real m4 [7] = '{0.95, 0.92, 0.88, 0.87, 0.9, 0.98, 0.82};
    real v4 [7] = '{0.03, 0.08, 0.1, 0.15, 0.1, 0.01, 0.1};
    fa_valid = 0; fa_data = '0; fb_v = 0; fb_d = '0;
    ka_active = IA'(KA); kb_active = IB'(KB);
    for (int i = 0; i < KA; i++) cfg_a[i] = RR_UCB;
    for (int i = 0; i < KB; i++) cfg_b[i] = RR_UCB;
    alpha = WL'(1 << F); alpha1 = WL'(1 << F); alpha2 = WL'(1 << (F - 2));
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_a("mu1", m1, v1, RR_UCB, 5, 1'b1);
    run_a("mu1", m1, v1, RR_UCBV, 5, 1'b0);
    run_a("mu1", m1, v1, RR_UCBT, 5, 1'b0);
    run_a("mu2", m2, v2, RR_UCB, 3, 1'b1);
    run_a("mu2", m2, v2, RR_UCBV, 3, 1'b0);
    run_a("mu2", m2, v2, RR_UCBT, 3, 1'b0);
    run_b("mu3", m3, v3, 6);
    run_b("mu4", m4, v4, 6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
