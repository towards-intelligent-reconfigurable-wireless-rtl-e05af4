// tb_ipu: self-checking test of the input processing unit (feedback decoder, update units,
// INIT arm picker).
//
// For K = 1..4 active arms it sends an INIT word, then plays slots: in INIT mode it checks that
// the block itself picks every arm 1..K exactly once; afterwards it plays random arms. Each
// feedback word carries a random 28-bit reward. A reference model in this testbench keeps
// X, Y, T, n with the same truncation to 6 fractional bits (r_f = top 6 reward bits,
// r^2 = top 6 bits of r_f*r_f) and every statistics beat is compared with it. The statistics
// handshake is tested with random stat_ready back-pressure, and a final INIT must clear the
// statistics again.
module tb_ipu;
  import mab_pkg::*;
  localparam int K_MAX = 5, WL = 11, CNT_W = 16, F = WL - INT_BITS;
  localparam int IDX_W = $clog2(K_MAX + 1), RW = FB_W - IDX_W - 1, XW = CNT_W + F;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [IDX_W-1:0] k_active;
  logic fb_valid, stat_valid, stat_ready, init_sel_valid, learn, busy;
  logic [FB_W-1:0] fb_data;
  logic [XW-1:0] x_o [K_MAX];
  logic [XW-1:0] y_o [K_MAX];
  logic [CNT_W-1:0] t_o [K_MAX];
  logic [CNT_W-1:0] n_o;
  logic [IDX_W-1:0] init_sel_idx;

  ipu dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  longint rx [K_MAX], ry [K_MAX], rt [K_MAX];
  longint rn;

  task automatic send(input logic [FB_W-1:0] w);
    @(negedge clk);
    fb_data = w; fb_valid = 1'b1;
    @(negedge clk);
    fb_valid = 1'b0;
  endtask

  // wait until the block is idle again; returns the INIT pick (0 if none)
  task automatic settle(output int pick);
    int guard = 0;
    pick = 0;
    while ((busy || init_sel_valid) && guard < 100) begin
      if (init_sel_valid) pick = init_sel_idx;
      stat_ready = ($urandom_range(0, 2) == 0);
      if (stat_valid && stat_ready) begin
        for (int k = 0; k < K_MAX; k++) begin
          check(x_o[k] == XW'(rx[k]), $sformatf("X[%0d]=%0d expected %0d", k, x_o[k], rx[k]));
          check(y_o[k] == XW'(ry[k]), $sformatf("Y[%0d]=%0d expected %0d", k, y_o[k], ry[k]));
          check(t_o[k] == CNT_W'(rt[k]), $sformatf("T[%0d]=%0d expected %0d", k, t_o[k], rt[k]));
        end
        check(n_o == CNT_W'(rn), $sformatf("n=%0d expected %0d", n_o, rn));
      end
      @(negedge clk);
      guard++;
    end
    if (init_sel_valid) pick = init_sel_idx;
    check(guard < 100, "block returns to idle");
  endtask

  initial begin
    int pick, arm, rf, r2;
    bit seen [K_MAX];
    logic [RW-1:0] r;
    fb_valid = 1'b0; fb_data = '0; stat_ready = 1'b0; k_active = IDX_W'(K_MAX);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    check(n_o == 1 && t_o[0] == 0 && !learn, "reset values n=1, T=0, INIT mode");
    for (int k = 1; k <= K_MAX; k++) begin
      for (int rep = 0; rep < 3; rep++) begin
        k_active = IDX_W'(k);
        send(FB_W'(1) << IDX_W);
        for (int i = 0; i < K_MAX; i++) begin rx[i] = 0; ry[i] = 0; rt[i] = 0; seen[i] = 0; end
        rn = 1;
        settle(pick);
        for (int s = 0; s < 40; s++) begin
          if (s < k) begin
            check(!learn, "INIT mode during first K slots");
            check(pick >= 1 && pick <= k, $sformatf("INIT pick %0d outside 1..%0d", pick, k));
            if (pick >= 1 && pick <= k) begin
              check(!seen[pick-1], $sformatf("INIT pick %0d repeated", pick));
              seen[pick-1] = 1'b1;
            end
            arm = pick;
          end else begin
            check(learn, "LEARN mode after K slots");
            check(pick == 0, "no INIT pick in LEARN mode");
            arm = $urandom_range(1, k);
          end
          r = RW'($urandom());
          if (s % 7 == 3) r = '1;
          rf = int'(r[RW-1 -: F]);
          r2 = (rf * rf) >> F;
          if (arm >= 1) begin
            rx[arm-1] += rf; ry[arm-1] += r2; rt[arm-1] += 1;
          end
          rn += 1;
          send({r, 1'b0, IDX_W'(arm)});
          settle(pick);
          check(n_o == CNT_W'(rn), "slot counter");
        end
        for (int i = 0; i < k; i++) check(seen[i], $sformatf("arm %0d never picked in INIT", i + 1));
      end
    end
    send(FB_W'(1) << IDX_W);
    settle(pick);
    check(x_o[0] == 0 && y_o[1] == 0 && t_o[3] == 0 && n_o == 1, "INIT clears statistics");
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
