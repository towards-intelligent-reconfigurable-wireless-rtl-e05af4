// tb_qf_rr: self-checking test of one reconfigurable region (the model of a partially
// reconfigurable slot that holds a UCB, UCB_V or UCB_T quality-factor unit, or is blank).
//
// For random arm statistics and a configuration that changes at random between beats, it
// checks that an algorithm region answers act = 1 with the Q of the configured algorithm
// (reference computed here in double precision; accepted window as in the single-unit
// tests: ln(n) may be under-estimated by 0.061, V is known to 3 LSB, plus truncation slack),
// and that a blank region answers act = 0 with one-cycle latency.
module tb_qf_rr;
  import mab_pkg::*;
  localparam int WL = 11, CNT_W = 16, F = WL - INT_BITS, XW = CNT_W + F;
  localparam real LSB = 1.0 / real'(1 << F);
  localparam real QMAX = real'((1 << WL) - 1) * LSB;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  rr_cfg_e cfg;
  logic in_valid, in_ready, out_valid, out_ready, act;
  logic [XW-1:0] x, y;
  logic [CNT_W-1:0] t, n;
  logic [WL-1:0] alpha, alpha1, alpha2, q;

  qf_rr dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  function automatic real sat(input real v);
    return (v > QMAX) ? QMAX : ((v < 0.0) ? 0.0 : v);
  endfunction

  function automatic real qref(input rr_cfg_e c, input real xr, input real yr, input real tr,
                               input real ln_n, input real a, input real a1, input real a2,
                               input real dv);
    real m, v;
    m = xr / tr;
    v = yr / tr - m * m + dv;
    if (v < 0.0) v = 0.0;
    case (c)
      RR_UCB:  return sat(m + $sqrt(a * ln_n / tr));
      RR_UCBV: return sat(m + $sqrt(a1 * ln_n * v / tr) + a2 * ln_n / tr);
      default: return sat(v + $sqrt(a * ln_n / tr));
    endcase
  endfunction

  initial begin
    real mu, xr, yr, a, a1, a2, hi, lo, got;
    int ti, ni, nb = 0;
    in_valid = 0; out_ready = 1; x = '0; y = '0; t = '0; n = '0;
    alpha = '0; alpha1 = '0; alpha2 = '0; cfg = RR_UCB;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 4000; it++) begin
      cfg = rr_cfg_e'($urandom_range(0, 3));
      ti = $urandom_range(1, 300);
      ni = $urandom_range(ti, 10000);
      mu = real'($urandom_range(0, 1000)) / 1000.0;
      x  = XW'($rtoi(mu * ti / LSB));
      xr = real'(x) * LSB;
      yr = xr * xr / ti + (xr - xr * xr / ti) * real'($urandom_range(0, 100)) / 100.0;
      y  = XW'($rtoi(yr / LSB));
      yr = real'(y) * LSB;
      alpha  = WL'($urandom_range(16, 192));
      alpha1 = WL'($urandom_range(16, 192));
      alpha2 = WL'($urandom_range(16, 192));
      a = real'(alpha) * LSB; a1 = real'(alpha1) * LSB; a2 = real'(alpha2) * LSB;
      t = CNT_W'(ti); n = CNT_W'(ni);
      @(negedge clk);
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      check(out_valid, "one-cycle latency");
      if (cfg == RR_BLANK) begin
        check(!act, "blank region reports inactive");
        nb++;
      end else begin
        hi  = qref(cfg, xr, yr, ti, $ln(real'(ni)), a, a1, a2, 3.0 * LSB) + 2.0 * LSB;
        lo  = qref(cfg, xr, yr, ti, $ln(real'(ni)) - 0.061, a, a1, a2, -3.0 * LSB) - 10.0 * LSB;
        got = real'(q) * LSB;
        check(act && got <= hi && got >= lo,
              $sformatf("%s T=%0d n=%0d: act=%0d q=%f window [%f, %f]", cfg.name(), ti, ni, act,
                        got, lo, hi));
      end
    end
    check(nb > 0, "blank configuration exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
