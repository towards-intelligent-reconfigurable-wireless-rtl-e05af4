// chan_eq: channel equalisation and data-symbol extraction of the receiver (Sec. IV-D).
//
// For each data bin b of a payload symbol: Z = Y * conj(H) / |H|^2 (zero-forcing), computed in
// Q1.15 with a combinational divider, rounded toward zero and saturated. The 48 results are
// written to a buffer at their data-symbol index (inverse of the Fig. 6 map, phy_pkg::bin_data)
// and, after bin 63, sent out in order 0..47, one per clock. Pilot, null and DC bins are dropped.
// A zero estimate gives Z = 0. The paper only names the equaliser; zero-forcing is this design's
// choice. Timing: 48 clocks of output after the last bin of a symbol; the next symbol's bins
// must not start before that (they come at least 80 samples later).
// Lint note: the assertion uses rst_n in 'disable iff', which lint reports as a reset used
// both synchronously and asynchronously; it is a check only, not logic.
module chan_eq
  import phy_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_stb,
  input  cplx_t      in_y,
  input  cplx_t      in_h,
  input  logic [5:0] in_bin,
  output logic       out_stb,
  output cplx_t      out_sym,
  output logic [5:0] out_idx
);

  cplx_t      buf_q [N_DATA];
  logic       emit;
  logic [5:0] e_cnt;

  logic signed [33:0] num_re, num_im;
  logic signed [33:0] den;
  logic signed [49:0] z_re, z_im;
  always_comb begin
    num_re = 34'(in_y.re * in_h.re) + 34'(in_y.im * in_h.im);
    num_im = 34'(in_y.im * in_h.re) - 34'(in_y.re * in_h.im);
    den    = 34'(in_h.re * in_h.re) + 34'(in_h.im * in_h.im);
    if (den == 0) begin
      z_re = '0;
      z_im = '0;
    end else begin
      z_re = (50'(num_re) <<< 15) / 50'(den);
      z_im = (50'(num_im) <<< 15) / 50'(den);
    end
  end

  function automatic logic signed [15:0] sat16(input logic signed [49:0] v);
    if (v > 50'sd32767)  return 16'sd32767;
    if (v < -50'sd32768) return -16'sd32768;
    return v[15:0];
  endfunction

  always_ff @(posedge clk) begin
    if (in_stb && bin_kind(in_bin) == 2'd1) begin
      buf_q[bin_data(in_bin)].re <= sat16(z_re);
      buf_q[bin_data(in_bin)].im <= sat16(z_im);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      emit <= 1'b0;
      e_cnt <= '0;
    end else if (emit) begin
      e_cnt <= e_cnt + 1'b1;
      if (e_cnt == 6'(N_DATA - 1)) begin
        emit  <= 1'b0;
        e_cnt <= '0;
      end
    end else if (in_stb && in_bin == 6'd63) begin
      emit <= 1'b1;
    end
  end

  assign out_stb = emit;
  assign out_sym = buf_q[e_cnt];
  assign out_idx = e_cnt;

  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) emit |-> !in_stb);

endmodule
