// tb_sync_autocorr: self-checking test of the auto-correlation frame detector.
//
// Each frame: 20 zero samples, then the stored 320-sample preamble multiplied by a random
// complex fading coefficient (magnitude 0.3..1), then 80 random payload samples. The expected
// detection sample is computed here in double precision on the same quantised samples:
// P(t) = sum_{i<32} conj(r[t-i-16]) r[t-i], R(t) = sum_{i<32} |r[t-i]|^2, first t with
// |P|^2 > 0.75 R^2. The detector must fire exactly once per frame, within 1 sample of the
// reference; out_data must be the input delayed by one sample. clear re-arms it.
module tb_sync_autocorr;
  import phy_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clear, in_stb, out_stb, out_det, out_level;
  cplx_t in_data, out_data;

  sync_autocorr dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  logic [31:0] rom [320];
  initial $readmemh("rtl/preamble.hex", rom);

  real fr [420], fi [420];
  int exp_det, got_det, ndet, oi;
  cplx_t sent [$];

  always @(posedge clk) if (rst_n && out_stb) begin
    cplx_t e;
    e = sent.pop_front();
    check(out_data == e, "out_data is the delayed input");
    if (out_det) begin
      ndet++;
      got_det = oi;
    end
    oi++;
  end

  function automatic logic [15:0] q15(input real v);
    int r;
    r = $rtoi(v * 32768.0 + (v >= 0.0 ? 0.5 : -0.5));
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    return 16'(r);
  endfunction

  initial begin
    real mag, ph, hr, hi, xr, xi, pr, pim, rr;
    clear = 0; in_stb = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < 30; f++) begin
      @(negedge clk);
      clear = 1;
      @(negedge clk);
      clear = 0;
      ndet = 0; got_det = -1; oi = 0;
      mag = 0.3 + 0.7 * real'($urandom_range(0, 1000)) / 1000.0;
      ph = 6.2831853 * real'($urandom_range(0, 1000)) / 1000.0;
      hr = mag * $cos(ph); hi = mag * $sin(ph);
      for (int t = 0; t < 420; t++) begin
        if (t < 20) begin xr = 0; xi = 0; end
        else if (t < 340) begin
          xr = real'($signed(rom[t - 20][31:16])) / 32768.0;
          xi = real'($signed(rom[t - 20][15:0])) / 32768.0;
          pr = xr * hr - xi * hi;
          xi = xr * hi + xi * hr;
          xr = pr;
        end else begin
          xr = 0.1 * (real'($urandom_range(0, 2000)) / 1000.0 - 1.0);
          xi = 0.1 * (real'($urandom_range(0, 2000)) / 1000.0 - 1.0);
        end
        fr[t] = real'($signed(q15(xr))) / 32768.0;
        fi[t] = real'($signed(q15(xi))) / 32768.0;
      end
      exp_det = -1;
      for (int t = 47; t < 420 && exp_det < 0; t++) begin
        pr = 0; pim = 0; rr = 0;
        for (int i = 0; i < 32; i++) begin
          pr  += fr[t-i-16] * fr[t-i] + fi[t-i-16] * fi[t-i];
          pim += fr[t-i-16] * fi[t-i] - fi[t-i-16] * fr[t-i];
          rr  += fr[t-i] * fr[t-i] + fi[t-i] * fi[t-i];
        end
        if (rr > 0.0 && pr * pr + pim * pim > 0.75 * rr * rr) exp_det = t;
      end
      for (int t = 0; t < 420; t++) begin
        @(negedge clk);
        in_data.re = q15(fr[t]); in_data.im = q15(fi[t]);
        in_stb = 1;
        sent.push_back(in_data);
        @(negedge clk);
        in_stb = 0;
      end
      repeat (2) @(negedge clk);
      check(ndet == 1, $sformatf("frame %0d: %0d detections", f, ndet));
      check(got_det >= exp_det - 1 && got_det <= exp_det + 1,
            $sformatf("frame %0d: detected at %0d, reference %0d", f, got_det, exp_det));
      if (f == 0) $display("first frame: detection at sample %0d of the preamble", got_det - 20);
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
