// sync_autocorr: frame detection by delayed auto-correlation (Sec. IV-D, Eq. 8-10 of the paper).
//
//   P[i] = sum_{m=0}^{31} conj(r[i+m]) * r[i+m+16]      (window 32, lag 16)
//   R[i] = sum_{m=0}^{31} |r[i+m+16]|^2
//   M[i] = |P[i]|^2 / R[i]^2  compared with the threshold 0.75
// Both sums are kept as running sums over the newest 32 lagged products: when sample r[t]
// arrives, conj(r[t-16])*r[t] and |r[t]|^2 are added and the terms leaving the window
// (computed again from a 48-sample delay line) are subtracted. Products are truncated by
// SH bits before summation; the same truncated value is added and later subtracted, so the sums
// stay exact. The division of Eq. 9 is avoided: the comparator tests 4|P|^2 > 3R^2, which is
// M > 0.75 for R > 0.
//
// Output: the input stream delayed by one clock (out_stb/out_data) with out_det high on the
// sample at which the comparator first goes from low to high after clear (one detection per
// slot, as the paper describes one transition per frame for the preamble). out_level is the raw
// comparator output. clear empties the delay line and re-arms the detector; the paper resets the
// receiver after every time slot.
// Follows the paper: window, lag, threshold. This design's choices: truncation SH = 10 and the
// one-shot arming.
module sync_autocorr
  import phy_pkg::*;
#(
  parameter int unsigned SH = 10
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  logic  in_stb,
  input  cplx_t in_data,
  output logic  out_stb,
  output cplx_t out_data,
  output logic  out_det,
  output logic  out_level
);

  localparam int unsigned DL = 48;
  cplx_t dl [DL];                 // dl[0] newest stored sample r[t-1]
  logic signed [39:0] p_re, p_im, r_e;

  function automatic logic signed [39:0] cmul_re(input cplx_t a, input cplx_t b);
    // real part of conj(a) * b
    return (40'($signed(32'(a.re * b.re))) + 40'($signed(32'(a.im * b.im)))) >>> SH;
  endfunction
  function automatic logic signed [39:0] cmul_im(input cplx_t a, input cplx_t b);
    return (40'($signed(32'(a.re * b.im))) - 40'($signed(32'(a.im * b.re)))) >>> SH;
  endfunction

  // new terms use r[t] (input) and r[t-16] (dl[15]); leaving terms use r[t-32] and r[t-48]
  logic signed [39:0] add_re, add_im, add_e, sub_re, sub_im, sub_e;
  always_comb begin
    add_re = cmul_re(dl[15], in_data);
    add_im = cmul_im(dl[15], in_data);
    add_e  = cmul_re(in_data, in_data);
    sub_re = cmul_re(dl[47], dl[31]);
    sub_im = cmul_im(dl[47], dl[31]);
    sub_e  = cmul_re(dl[31], dl[31]);
  end

  logic armed, lvl_q;
  logic signed [79:0] pp, rr;
  always_comb begin
    pp = 80'(p_re * p_re) + 80'(p_im * p_im);
    rr = 80'(r_e * r_e);
    out_level = (r_e > 0) && ((pp <<< 2) > (rr * 3));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DL; i++) dl[i] <= '0;
      p_re <= '0; p_im <= '0; r_e <= '0;
      out_stb <= 1'b0; out_data <= '0;
      armed <= 1'b1; lvl_q <= 1'b0;
    end else if (clear) begin
      for (int i = 0; i < DL; i++) dl[i] <= '0;
      p_re <= '0; p_im <= '0; r_e <= '0;
      out_stb <= 1'b0;
      armed <= 1'b1; lvl_q <= 1'b0;
    end else begin
      out_stb <= in_stb;
      if (in_stb) begin
        out_data <= in_data;
        dl[0] <= in_data;
        for (int i = 1; i < DL; i++) dl[i] <= dl[i-1];
        p_re <= p_re + add_re - sub_re;
        p_im <= p_im + add_im - sub_im;
        r_e  <= r_e + add_e - sub_e;
      end
      if (out_stb) begin
        lvl_q <= out_level;
        if (out_level && !lvl_q) armed <= 1'b0;
      end
    end
  end

  assign out_det = out_stb && armed && out_level && !lvl_q;

endmodule
