// tb_chan_est: self-checking test of channel estimation and the reward computation.
//
// Each slot feeds three 64-bin FFT outputs: two long training symbols Y = H*L (L = the
// 802.11a long-training sequence, written out here) and one payload symbol Y = H*X with
// random data, pilots +1,+1,+1,-1 at subcarriers -21,-7,7,21 and zeros elsewhere. H is a
// random complex gain per bin (magnitude up to 0.95), and the second training symbol gets
// small independent noise so that the averaging is visible. Checks per payload bin:
// out_y = Y, out_bin = bin, out_h within 2 LSB of the reference (mean of the two Y*L);
// and the reward against sum |Y_pilot|^2 / sum |X_pilot|^2 (double precision) within 1e-4,
// delivered once, after the last payload bin. clear starts a new slot.
module tb_chan_est;
  import phy_pkg::*;
  localparam int RW = 28;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clear, in_stb, out_stb, reward_valid;
  cplx_t in_data, out_y, out_h;
  logic [5:0] out_bin;
  logic [RW-1:0] reward;

  chan_est dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  int l_v [53] = '{1,1,-1,-1,1,1,-1,1,-1,1,1,1,1,1,1,-1,-1,1,1,-1,1,-1,1,1,1,1,0,1,-1,-1,1,1,-1,1,-1,1,-1,-1,-1,-1,-1,1,1,-1,-1,1,-1,1,-1,1,1,1,1};
  int lb [64];
  real hr [64], hi [64], er [64], ei [64];
  cplx_t ypay [64];
  int nrw, nout;
  real exp_rw;

  function automatic logic [15:0] q15(input real v);
    int r;
    r = $rtoi(v * 32768.0 + (v >= 0.0 ? 0.5 : -0.5));
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    return 16'(r);
  endfunction

  function automatic bit near(input logic [15:0] v, input real r);
    int e;
    e = int'($signed(v)) - $rtoi(r * 32768.0 + (r >= 0.0 ? 0.5 : -0.5));
    return e >= -2 && e <= 2;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (out_stb) begin
      check(int'(out_bin) == nout, "bins in order");
      check(out_y == ypay[out_bin], "payload passed through");
      check(near(out_h.re, er[out_bin]) && near(out_h.im, ei[out_bin]),
            $sformatf("bin %0d: h %0d/%0d expected %f/%f", out_bin, $signed(out_h.re),
                       $signed(out_h.im), er[out_bin] * 32768, ei[out_bin] * 32768));
      nout++;
    end
    if (reward_valid) begin
      real g;
      g = real'(reward) / real'(1 << RW);
      check(nout == 64, "reward after the last payload bin");
      check(g - exp_rw < 1.0e-4 && exp_rw - g < 1.0e-4,
            $sformatf("reward %f expected %f", g, exp_rw));
      nrw++;
    end
  end

  task automatic send_bin(input cplx_t v);
    @(negedge clk);
    in_data = v; in_stb = 1;
    @(negedge clk);
    in_stb = 0;
    while ($urandom_range(0, 3) == 0) @(negedge clk);
  endtask

  initial begin
    real m, p, yr, yi, nr, ni, prx, ptx, xr, xi;
    cplx_t y1 [64];
    cplx_t y2 [64];
    clear = 0; in_stb = 0; in_data = '0;
    for (int b = 0; b < 64; b++) lb[b] = 0;
    for (int k = -26; k <= 26; k++) lb[(k + 64) % 64] = l_v[k + 26];
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < 30; s++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      nrw = 0; nout = 0; prx = 0; ptx = 0;
      for (int b = 0; b < 64; b++) begin
        m = 0.95 * real'($urandom_range(0, 1000)) / 1000.0;
        p = 6.2831853 * real'($urandom_range(0, 1000)) / 1000.0;
        hr[b] = m * $cos(p); hi[b] = m * $sin(p);
        y1[b].re = q15(hr[b] * lb[b]); y1[b].im = q15(hi[b] * lb[b]);
        nr = 0.002 * (real'($urandom_range(0, 2000)) / 1000.0 - 1.0);
        ni = 0.002 * (real'($urandom_range(0, 2000)) / 1000.0 - 1.0);
        y2[b].re = q15((hr[b] + nr) * lb[b]); y2[b].im = q15((hi[b] + ni) * lb[b]);
        // reference estimate: mean of Y1*L and Y2*L
        er[b] = lb[b] * (real'($signed(y1[b].re)) + real'($signed(y2[b].re))) / 65536.0;
        ei[b] = lb[b] * (real'($signed(y1[b].im)) + real'($signed(y2[b].im))) / 65536.0;
        // payload
        case (bin_kind(6'(b)))
          2'd1: begin
            xr = real'($urandom_range(0, 2000)) / 2000.0 - 0.5;
            xi = real'($urandom_range(0, 2000)) / 2000.0 - 0.5;
          end
          2'd2: begin xr = (b == 21) ? -1.0 : 1.0; xi = 0.0; end
          default: begin xr = 0.0; xi = 0.0; end
        endcase
        yr = xr * hr[b] - xi * hi[b];
        yi = xr * hi[b] + xi * hr[b];
        ypay[b].re = q15(yr); ypay[b].im = q15(yi);
        if (bin_kind(6'(b)) == 2'd2) begin
          prx += real'($signed(ypay[b].re)) ** 2 + real'($signed(ypay[b].im)) ** 2;
          ptx += 32767.0 * 32767.0;
        end
      end
      exp_rw = prx / ptx;
      if (exp_rw > 1.0) exp_rw = 1.0;
      for (int b = 0; b < 64; b++) send_bin(y1[b]);
      for (int b = 0; b < 64; b++) send_bin(y2[b]);
      for (int b = 0; b < 64; b++) send_bin(ypay[b]);
      repeat (3) @(negedge clk);
      check(nout == 64 && nrw == 1, $sformatf("slot %0d: %0d bins, %0d rewards", s, nout, nrw));
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
