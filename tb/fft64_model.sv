// fft64_model: behavioural model of a 64-point streaming (I)FFT core, for simulation only.
//
// Collects 64 complex Q1.15 samples (in_stb while in_ack), computes the transform in floating
// point and then offers the 64 results in natural order (out_stb, advanced by out_ack).
//   INVERSE = 1: x[t] = (1/64) * sum_k X[k] exp(+j*2*pi*k*t/64)
//   INVERSE = 0: X[k] =          sum_t x[t] exp(-j*2*pi*k*t/64)
// Results are rounded and saturated to Q1.15 and queued, so input is always accepted
// (in_ack = 1) and any number of transforms may wait for the consumer.
// The scaling pair keeps a constellation point of amplitude 1 at amplitude 1 after IFFT + FFT.
module fft64_model
  import phy_pkg::*;
#(
  parameter bit INVERSE = 1'b1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_stb,
  output logic  in_ack,
  input  cplx_t in_data,
  output logic  out_stb,
  input  logic  out_ack,
  output cplx_t out_data
);

  real   xr [64], xi [64];
  cplx_t res [64];
  cplx_t q [$];
  int    w_cnt;

  function automatic logic signed [15:0] q15(input real v);
    real s;
    s = v * 32768.0;
    if (s > 32767.0)  return 16'sd32767;
    if (s < -32768.0) return -16'sd32768;
    return 16'($rtoi(s + ((s >= 0.0) ? 0.5 : -0.5)));
  endfunction

  task automatic transform();
    real sr, si, ang, sg, sc;
    sg = INVERSE ? 1.0 : -1.0;
    sc = INVERSE ? (1.0 / 64.0) : 1.0;
    for (int k = 0; k < 64; k++) begin
      sr = 0.0; si = 0.0;
      for (int t = 0; t < 64; t++) begin
        ang = sg * 2.0 * 3.14159265358979 * real'(k * t) / 64.0;
        sr += xr[t] * $cos(ang) - xi[t] * $sin(ang);
        si += xr[t] * $sin(ang) + xi[t] * $cos(ang);
      end
      res[k].re = q15(sr * sc);
      res[k].im = q15(si * sc);
    end
  endtask

  assign in_ack = 1'b1;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_cnt = 0;
      q.delete();
      out_stb  <= 1'b0;
      out_data <= '0;
    end else begin
      // output side: a beat offered in out_data is consumed when out_ack is high
      if (out_stb && out_ack) void'(q.pop_front());
      if (in_stb) begin
        xr[w_cnt] = real'(in_data.re) / 32768.0;
        xi[w_cnt] = real'(in_data.im) / 32768.0;
        if (w_cnt == 63) begin
          transform();
          for (int k = 0; k < 64; k++) q.push_back(res[k]);
          w_cnt = 0;
        end else begin
          w_cnt = w_cnt + 1;
        end
      end
      out_stb  <= (q.size() > 0);
      if (q.size() > 0) out_data <= q[0];
    end
  end

endmodule
