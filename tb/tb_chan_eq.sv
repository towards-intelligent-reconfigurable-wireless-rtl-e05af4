// tb_chan_eq: self-checking test of zero-forcing channel equalisation.
//
// Each symbol feeds 64 bins (y, h, bin) with a random channel gain per bin (magnitude
// 0.2..0.95, random phase) and random data x, y = h*x. The expected output, computed here in
// double precision, is y*conj(h)/|h|^2 on the 48 data bins, delivered in data-index order
// 0..47 after bin 63 (data index d is the d-th data subcarrier counting k = -26..26 and
// skipping 0, +-7, +-21). Accepted within 3 LSB. Pilot and null bins must not appear.
module tb_chan_eq;
  import phy_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_stb, out_stb;
  cplx_t in_y, in_h, out_sym;
  logic [5:0] in_bin, out_idx;

  chan_eq dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  real zr [48], zi [48];
  int nout;

  function automatic logic [15:0] q15(input real v);
    int r;
    r = $rtoi(v * 32768.0 + (v >= 0.0 ? 0.5 : -0.5));
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    return 16'(r);
  endfunction

  function automatic bit near(input logic [15:0] v, input real r);
    int e;
    e = int'($signed(v)) - $rtoi(r * 32768.0);
    return e >= -3 && e <= 3;
  endfunction

  always @(posedge clk) if (rst_n && out_stb) begin
    check(int'(out_idx) == nout, "data index order");
    check(near(out_sym.re, zr[nout]) && near(out_sym.im, zi[nout]),
          $sformatf("data %0d: %0d/%0d expected %f/%f", nout, $signed(out_sym.re),
                     $signed(out_sym.im), zr[nout] * 32768, zi[nout] * 32768));
    nout++;
  end

  initial begin
    int dmap [64];
    int d;
    real m, p, hr, hi, xr, xi, yr, yi, den;
    in_stb = 0; in_y = '0; in_h = '0; in_bin = '0;
    for (int b = 0; b < 64; b++) dmap[b] = -1;
    d = 0;
    for (int k = -26; k <= 26; k++) begin
      if (k == 0 || k == 7 || k == -7 || k == 21 || k == -21) continue;
      dmap[(k + 64) % 64] = d;
      d++;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < 60; s++) begin
      nout = 0;
      for (int b = 0; b < 64; b++) begin
        m = 0.2 + 0.75 * real'($urandom_range(0, 1000)) / 1000.0;
        p = 6.2831853 * real'($urandom_range(0, 1000)) / 1000.0;
        in_h.re = q15(m * $cos(p)); in_h.im = q15(m * $sin(p));
        hr = real'($signed(in_h.re)) / 32768.0; hi = real'($signed(in_h.im)) / 32768.0;
        xr = 0.95 * (real'($urandom_range(0, 2000)) / 1000.0 - 1.0);
        xi = 0.95 * (real'($urandom_range(0, 2000)) / 1000.0 - 1.0);
        in_y.re = q15((xr * hr - xi * hi)); in_y.im = q15((xr * hi + xi * hr));
        yr = real'($signed(in_y.re)) / 32768.0; yi = real'($signed(in_y.im)) / 32768.0;
        den = hr * hr + hi * hi;
        if (dmap[b] >= 0) begin
          zr[dmap[b]] = (yr * hr + yi * hi) / den;
          zi[dmap[b]] = (yi * hr - yr * hi) / den;
          if (zr[dmap[b]] > 0.99996) zr[dmap[b]] = 0.99996;
          if (zi[dmap[b]] > 0.99996) zi[dmap[b]] = 0.99996;
          if (zr[dmap[b]] < -1.0) zr[dmap[b]] = -1.0;
          if (zi[dmap[b]] < -1.0) zi[dmap[b]] = -1.0;
        end
        in_bin = 6'(b);
        @(negedge clk);
        in_stb = 1;
        @(negedge clk);
        in_stb = 0;
      end
      repeat (52) @(negedge clk);
      check(nout == 48, $sformatf("symbol %0d: %0d outputs", s, nout));
    end
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
