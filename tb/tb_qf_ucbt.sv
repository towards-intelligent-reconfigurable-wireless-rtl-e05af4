// tb_qf_ucbt: self-checking test of the UCB_T (Eq. 7) quality-factor unit.
//
// Drives random arm statistics (T = 1..300, per-play reward mean 0..1, second moment between
// mean^2 and mean, n = T..10000, alpha values 0.25..3) and compares Q with a reference
// computed here in double precision with the exact natural logarithm:
//   Q = Y/T - (X/T)^2 + sqrt(alpha ln n / T)
// The hardware truncates every intermediate to UQ5.6 and uses a piecewise-linear log2, which
// can only under-estimate ln(n) (by at most 0.06); the variance V, a difference of two
// truncated terms, is known to about 3 LSB. So the accepted window is
// [ref(ln n - 0.061, V - 3 LSB) - 10 LSB, ref(ln n, V + 3 LSB) + 2 LSB], saturated at the largest WL-bit value.
// Also checks: T = 0 gives all ones, output holds while out_ready is low, in_ready follows
// out_ready, one-cycle latency.
module tb_qf_ucbt;
  import mab_pkg::*;
  localparam int WL = 11, CNT_W = 16, F = WL - INT_BITS, XW = CNT_W + F;
  localparam real LSB = 1.0 / real'(1 << F);
  localparam real QMAX = real'((1 << WL) - 1) * LSB;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [XW-1:0] x, y;
  logic [CNT_W-1:0] t, n;
  logic [WL-1:0] alpha, alpha2, q;

  qf_ucbt dut (.*);

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

  // reference with a given ln(n)
  function automatic real qref(input real xr, input real yr, input real tr, input real ln_n,
                               input real a, input real a2, input real dv);
    real m, v;
    m = xr / tr;
    v = yr / tr - m * m + dv;
    if (v < 0.0) v = 0.0;
    return sat(v + $sqrt(a * ln_n / tr));
  endfunction

  initial begin
    real mu, xr, yr, tr, a, a2, hi, lo, got;
    int ti, ni;
    in_valid = 1'b0; out_ready = 1'b1; x = '0; y = '0; t = '0; n = '0; alpha = '0; alpha2 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 3000; it++) begin
      ti = $urandom_range(1, 300);
      ni = $urandom_range(ti, 10000);
      mu = real'($urandom_range(0, 1000)) / 1000.0;
      xr = mu * ti;
      x  = XW'($rtoi(xr / LSB));
      xr = real'(x) * LSB;
      yr = xr * xr / ti + (xr - xr * xr / ti) * real'($urandom_range(0, 100)) / 100.0;
      y  = XW'($rtoi(yr / LSB));
      yr = real'(y) * LSB;
      alpha  = WL'($urandom_range(16, 192));
      alpha2 = WL'($urandom_range(16, 192));
      a  = real'(alpha) * LSB;
      a2 = real'(alpha2) * LSB;
      tr = ti;
      t = CNT_W'(ti);
      n = CNT_W'(ni);
      @(negedge clk);
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      check(out_valid, "one-cycle latency");
      hi  = qref(xr, yr, tr, $ln(real'(ni)), a, a2, 3.0 * LSB) + 2.0 * LSB;
      lo  = qref(xr, yr, tr, $ln(real'(ni)) - 0.061, a, a2, -3.0 * LSB) - 10.0 * LSB;
      got = real'(q) * LSB;
      check(got <= hi && got >= lo,
            $sformatf("T=%0d n=%0d x=%f y=%f a=%f a2=%f: q=%f window [%f, %f]",
                       ti, ni, xr, yr, a, a2, got, lo, hi));
    end
    // T = 0: never-played arm gets the largest QF
    t = '0;
    @(negedge clk); in_valid = 1'b1;
    @(negedge clk); in_valid = 1'b0;
    check(out_valid && q == '1, "T=0 gives all ones");
    // back-pressure: hold output
    t = 16'd5; x = XW'(3 << F); y = XW'(2 << F); n = 16'd100;
    out_ready = 1'b0;
    @(negedge clk); in_valid = 1'b1;
    @(negedge clk);
    check(!in_ready, "in_ready low while output is held");
    begin
      logic [WL-1:0] held;
      held = q;
      t = 16'd1;
      repeat (3) @(negedge clk);
      check(out_valid && q == held, "output held while out_ready low");
    end
    out_ready = 1'b1;
    in_valid = 1'b0;
    @(negedge clk);
    @(negedge clk);
    check(!out_valid, "output drained");
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
