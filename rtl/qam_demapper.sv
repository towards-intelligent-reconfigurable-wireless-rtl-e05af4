// qam_demapper: data demodulator of the receiver (Sec. IV-D: "extracts the bits ... via hard
// decoding").
//
// Inverse of qam_mapper for equalised Q1.15 symbols. QPSK: a bit is 1 when its component is
// >= 0. 16-QAM: each component is sliced at 0 and +-0.6325 (midway between the Table I levels
// 0.3162 and 0.9485): below -0.6325 -> 00, [-0.6325, 0) -> 10, [0, 0.6325) -> 01, above -> 11.
// The thresholds are this design's choice; the paper only names hard decoding.
// Timing: registered, one clock of latency; out_stb follows in_stb.
module qam_demapper
  import phy_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  mod_e       mod,
  input  logic       in_stb,
  input  cplx_t      sym,
  output logic       out_stb,
  output logic [3:0] bits
);

  function automatic logic [1:0] slice16(input logic signed [15:0] v);
    if (v < -QAM_TH)      return 2'b00;
    else if (v < 16'sd0)  return 2'b10;
    else if (v < QAM_TH)  return 2'b01;
    else                  return 2'b11;
  endfunction

  logic [3:0] b_c;
  logic [1:0] si, sq;
  always_comb begin
    si = slice16(sym.re);
    sq = slice16(sym.im);
    if (mod == MOD_QPSK) b_c = {2'b00, !sym.im[15], !sym.re[15]};
    else                 b_c = {sq[0], sq[1], si[0], si[1]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_stb <= 1'b0;
      bits    <= '0;
    end else begin
      out_stb <= in_stb;
      if (in_stb) bits <= b_c;
    end
  end

endmodule
