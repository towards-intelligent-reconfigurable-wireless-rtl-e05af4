// tb_fading_channel: self-checking test of the emulated flat-fading channel.
//
// Writes random complex coefficients for all K_MAX channels, then for random channel
// selections (a write selects its channel) multiplies random samples and checks
// out = in * h against a double-precision reference rounded to Q1.15 and saturated (within
// 1 LSB), with one-cycle latency. Channel index 0 writes are ignored.
module tb_fading_channel;
  import phy_pkg::*;
  localparam int K_MAX = 5, IDX_W = $clog2(K_MAX + 1);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic wr, in_stb, out_stb;
  logic [IDX_W-1:0] wr_idx, sel_idx;
  cplx_t wr_coef, in_data, out_data;

  fading_channel dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  cplx_t coefs [K_MAX];

  function automatic bit near(input logic [15:0] v, input real r);
    int e, ri;
    if (r > 32767.0) r = 32767.0;
    if (r < -32768.0) r = -32768.0;
    ri = $rtoi(r + (r >= 0.0 ? 0.5 : -0.5));
    e = int'($signed(v)) - ri;
    return e >= -1 && e <= 1;
  endfunction

  initial begin
    int c;
    real xr, xi, hr, hi;
    wr = 0; in_stb = 0; wr_idx = '0; wr_coef = '0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < K_MAX; k++) begin
      @(negedge clk);
      wr = 1; wr_idx = IDX_W'(k + 1);
      wr_coef.re = 16'($urandom()); wr_coef.im = 16'($urandom());
      coefs[k] = wr_coef;
    end
    @(negedge clk);
    wr = 0;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      c = $urandom_range(0, K_MAX);
      wr = 1; wr_idx = IDX_W'(c);
      if ($urandom_range(0, 1)) begin
        wr_coef.re = 16'($urandom()); wr_coef.im = 16'($urandom());
      end else wr_coef = (c > 0) ? coefs[c - 1] : '0;
      if (c > 0) coefs[c - 1] = wr_coef;
      @(negedge clk);
      wr = 0;
      if (c > 0) check(int'(sel_idx) == c, "write selects its channel");
      c = int'(sel_idx);
      in_data.re = 16'($urandom()); in_data.im = 16'($urandom());
      if (it % 10 == 0) begin in_data.re = 16'h8000; in_data.im = 16'h8000; end
      in_stb = 1;
      @(negedge clk);
      in_stb = 0;
      check(out_stb, "one-cycle latency");
      xr = $signed(in_data.re); xi = $signed(in_data.im);
      hr = $signed(coefs[c - 1].re) / 32768.0; hi = $signed(coefs[c - 1].im) / 32768.0;
      check(near(out_data.re, xr * hr - xi * hi) && near(out_data.im, xr * hi + xi * hr),
            $sformatf("channel %0d: out %0d/%0d expected %f/%f", c, $signed(out_data.re),
                       $signed(out_data.im), xr * hr - xi * hi, xr * hi + xi * hr));
    end
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
