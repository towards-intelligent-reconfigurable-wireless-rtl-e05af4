// tb_irphy_top: end-to-end test of the intelligent reconfigurable PHY at its default size.
//
// The testbench plays the processor side: it starts experiments with an INIT feedback word,
// draws a fading coefficient for the arm the learner picked, chooses QPSK or 16-QAM for that
// arm from the rewards seen so far, sends one frame of random bits through transmitter,
// channel and receiver, reads back the bits and the pilot-power reward, and returns the reward
// in the next feedback word. The 64-point IFFT/FFT cores are behavioural models.
// Three experiments exercise the reconfiguration: UCB with K = 5, UCB_T with K = 4 (the last
// channel made unavailable, region 5 blank) and UCB_V with K = 5.
// Checks: every received bit, the reward against |h|^2, every picked arm in range, the INIT
// phase visiting each arm exactly once, and that the best arm is picked most in the long UCB
// run. Mechanisms counted (each must occur): INIT picks, LEARN picks, QPSK slots, 16-QAM
// slots, frame detections, algorithm switches, K change (blank region).
module tb_irphy_top;
  import mab_pkg::*;
  import phy_pkg::*;

  localparam int K_MAX = 5;
  localparam int WL    = 11;
  localparam int IDX_W = $clog2(K_MAX + 1);
  localparam int RW    = FB_W - IDX_W - 1;
  localparam int F     = WL - INT_BITS;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [IDX_W-1:0] k_active;
  rr_cfg_e          rr_cfg [K_MAX];
  logic [WL-1:0]    alpha, alpha1, alpha2;
  logic             fb_valid;
  logic [FB_W-1:0]  fb_data;
  logic             sel_valid, mab_learn, mab_busy;
  logic [IDX_W-1:0] sel_idx;
  mod_e             mod_sel;
  logic             slot_start, chan_wr;
  logic [IDX_W-1:0] chan_wr_idx;
  cplx_t            chan_wr_coef;
  logic             tx_stb, tx_ack;
  logic [3:0]       tx_bits;
  logic             ifft_in_stb, ifft_in_last, ifft_in_ack, ifft_out_stb, ifft_out_ack;
  cplx_t            ifft_in_data, ifft_out_data;
  logic             air_stb;
  cplx_t            air_data;
  logic             fft_in_stb, fft_in_last, fft_out_stb;
  cplx_t            fft_in_data, fft_out_data;
  logic             frame_det, rx_stb, reward_valid, tx_busy;
  logic [3:0]       rx_bits;
  logic [RW-1:0]    reward;

  irphy_top dut (.*);

  fft64_model #(.INVERSE(1'b1)) u_ifft (.clk, .rst_n, .in_stb(ifft_in_stb), .in_ack(ifft_in_ack),
    .in_data(ifft_in_data), .out_stb(ifft_out_stb), .out_ack(ifft_out_ack), .out_data(ifft_out_data));
  logic fft_ack_unused;
  fft64_model #(.INVERSE(1'b0)) u_fft (.clk, .rst_n, .in_stb(fft_in_stb), .in_ack(fft_ack_unused),
    .in_data(fft_in_data), .out_stb(fft_out_stb), .out_ack(1'b1), .out_data(fft_out_data));

  int checks = 0, failures = 0;
  int n_init = 0, n_learn = 0, n_qpsk = 0, n_qam = 0, n_det = 0, n_alg_switch = 0, n_kchange = 0;
  int n_reward = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  // channel statistics of the arms: the means and variances of the paper's adaptive-modulation
  // demonstration (mu = 0.43 0.92 0.35 0.87 0.41, sigma^2 = 0.04 0.08 0.1 0.05 0.04)
  real mu [K_MAX] = '{0.43, 0.92, 0.35, 0.87, 0.41};
  real sd [K_MAX] = '{0.2, 0.283, 0.316, 0.224, 0.2};

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1, 1000000))) / 1000000.0;
    u2 = (real'($urandom_range(0, 1000000))) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * 3.14159265358979 * u2);
  endfunction

  // per-experiment learner statistics kept by the "processor" for the modulation choice
  real sum_r [K_MAX];
  int  cnt_r [K_MAX];
  int  picks [K_MAX];

  // receive-side capture
  logic [3:0] sent [$];
  int rx_count;
  bit got_reward;
  logic [RW-1:0] last_reward;

  // outputs are only meaningful once reset has been released
  always @(posedge clk) if (rst_n) begin
    if (frame_det) n_det++;
    if (rx_stb) begin
      if (sent.size() == 0) check(1'b0, "unexpected rx symbol");
      else begin
        logic [3:0] exp_b;
        exp_b = sent.pop_front();
        check(rx_bits == exp_b, $sformatf("rx bits %h expected %h", rx_bits, exp_b));
      end
      rx_count++;
    end
    if (reward_valid) begin
      got_reward  = 1'b1;
      last_reward = reward;
    end
  end

  task automatic wait_sel(output logic [IDX_W-1:0] idx);
    int guard = 0;
    while (!sel_valid && guard < 200) begin
      @(posedge clk);
      guard++;
    end
    check(sel_valid, "learner answered");
    idx = sel_idx;
    if (mab_learn) n_learn++; else n_init++;
    @(posedge clk);
  endtask

  task automatic write_fb(input logic [FB_W-1:0] w);
    @(negedge clk);
    fb_data  = w;
    fb_valid = 1'b1;
    @(negedge clk);
    fb_valid = 1'b0;
  endtask

  // one slot on arm idx; returns the reward read back
  task automatic run_slot(input logic [IDX_W-1:0] idx, output logic [RW-1:0] r_out);
    real h, hq, exp_r, got_r, est;
    int a, nb;
    logic [3:0] b;
    a  = int'(idx) - 1;
    h  = mu[a] + sd[a] * gauss();
    if (h > 0.99) h = 0.99;
    if (h < 0.30) h = 0.30;
    // modulation: 16-QAM once the arm's average reward is high (processor policy)
    est = (cnt_r[a] > 0) ? sum_r[a] / cnt_r[a] : 0.0;
    mod_sel = (cnt_r[a] >= 1 && est > 0.5) ? MOD_QAM16 : MOD_QPSK;
    if (mod_sel == MOD_QAM16) n_qam++; else n_qpsk++;
    nb = (mod_sel == MOD_QAM16) ? 4 : 2;
    @(negedge clk);
    chan_wr = 1'b1;
    chan_wr_idx = idx;
    chan_wr_coef.re = 16'($rtoi(h * 32768.0));
    chan_wr_coef.im = '0;
    hq = real'(chan_wr_coef.re) / 32768.0;
    @(negedge clk);
    chan_wr = 1'b0;
    slot_start = 1'b1;
    got_reward = 1'b0;
    rx_count = 0;
    @(negedge clk);
    slot_start = 1'b0;
    // 48 data symbols
    for (int s = 0; s < N_DATA; s++) begin
      b = 4'($urandom());
      if (nb == 2) b[3:2] = 2'b00;
      tx_bits = b;
      tx_stb  = 1'b1;
      sent.push_back(b);
      @(posedge clk);
      while (!tx_ack) @(posedge clk);
      @(negedge clk);
    end
    tx_stb = 1'b0;
    begin
      int guard = 0;
      while (!(got_reward && rx_count == N_DATA) && guard < 5000) begin
        @(posedge clk);
        guard++;
      end
    end
    check(rx_count == N_DATA, $sformatf("received %0d of 48 symbols", rx_count));
    check(got_reward, "reward produced");
    exp_r = hq * hq;
    got_r = real'(last_reward) / real'(1 << RW);
    check((got_r - exp_r < 0.01) && (exp_r - got_r < 0.01),
          $sformatf("reward %f expected %f", got_r, exp_r));
    n_reward++;
    sum_r[a] += got_r;
    cnt_r[a]++;
    r_out = last_reward;
    sent.delete();
  endtask

  task automatic experiment(input int k, input rr_cfg_e alg, input int slots, input bit check_best);
    logic [IDX_W-1:0] idx;
    logic [RW-1:0] r;
    bit seen [K_MAX];
    k_active = IDX_W'(k);
    for (int i = 0; i < K_MAX; i++) begin
      rr_cfg[i] = alg;
      sum_r[i] = 0.0; cnt_r[i] = 0; picks[i] = 0; seen[i] = 1'b0;
    end
    write_fb(FB_W'(1) << IDX_W);            // INIT: reset the learner
    wait_sel(idx);
    for (int s = 0; s < slots; s++) begin
      check(idx >= 1 && int'(idx) <= k, $sformatf("arm %0d outside 1..%0d", idx, k));
      if (s < k) begin
        check(!seen[idx - 1], $sformatf("arm %0d picked twice during INIT", idx));
        seen[idx - 1] = 1'b1;
      end
      picks[idx - 1]++;
      run_slot(idx, r);
      write_fb({r, 1'b0, idx});
      wait_sel(idx);
    end
    for (int i = 0; i < k; i++) check(seen[i], $sformatf("arm %0d not visited in INIT", i + 1));
    if (check_best) check(picks[1] > picks[0] && picks[1] > picks[2] && picks[1] > picks[4],
                          $sformatf("best arm 2 picked %0d times", picks[1]));
    $display("experiment alg=%s K=%0d picks %0d %0d %0d %0d %0d", alg.name(), k,
             picks[0], picks[1], picks[2], picks[3], picks[4]);
  endtask

  initial begin
    fb_valid = 1'b0; fb_data = '0; slot_start = 1'b0; chan_wr = 1'b0; chan_wr_idx = '0;
    chan_wr_coef = '0; tx_stb = 1'b0; tx_bits = '0; mod_sel = MOD_QPSK;
    k_active = IDX_W'(K_MAX);
    alpha  = WL'(2 << F);     // 2.0
    alpha1 = WL'(1 << F);     // 1.0
    alpha2 = WL'(1 << (F-1)); // 0.5
    for (int i = 0; i < K_MAX; i++) rr_cfg[i] = RR_UCB;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);
    experiment(5, RR_UCB, 100, 1'b1);
    n_alg_switch++;
    n_kchange++;
    experiment(4, RR_UCBT, 40, 1'b0);
    n_alg_switch++;
    n_kchange++;
    experiment(5, RR_UCBV, 40, 1'b0);
    check(n_det == n_reward, $sformatf("frames detected %0d of %0d", n_det, n_reward));
    check(n_init > 0,  "INIT picks occurred");
    check(n_learn > 0, "LEARN picks occurred");
    check(n_qpsk > 0,  "QPSK slots occurred");
    check(n_qam > 0,   "16-QAM slots occurred");
    check(n_alg_switch > 0 && n_kchange > 0, "reconfiguration occurred");
    $display("mechanisms: init=%0d learn=%0d qpsk=%0d qam16=%0d frames=%0d alg_switch=%0d k_change=%0d",
             n_init, n_learn, n_qpsk, n_qam, n_det, n_alg_switch, n_kchange);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
