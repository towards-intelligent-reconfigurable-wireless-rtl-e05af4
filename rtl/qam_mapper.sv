// qam_mapper: data modulator of the transmitter (Sec. IV-B, Table I of the paper).
//
// Maps 2 bits (QPSK) or 4 bits (16-QAM) to one complex Q1.15 symbol using the values of
// Table I: QPSK 0 -> -0.7071, 1 -> +0.7071; 16-QAM 00 -> -0.9485, 01 -> +0.3162,
// 10 -> -0.3162, 11 -> +0.9485 per component. Bit order (this design's choice, the paper gives
// the table only per component): QPSK I = bits[0], Q = bits[1]; 16-QAM I = {bits[0], bits[1]},
// Q = {bits[2], bits[3]} with the first bit as the left digit of the table.
//
// Handshake: wishbone-style strobe/acknowledge, passed straight through (combinational, zero
// latency): the symbol is taken when in_stb and out_ack are both high. The modulation is
// selected per slot by mod (in the paper by partial reconfiguration of this block).
module qam_mapper
  import phy_pkg::*;
(
  input  mod_e        mod,
  input  logic        in_stb,
  output logic        in_ack,
  input  logic [3:0]  bits,
  output logic        out_stb,
  input  logic        out_ack,
  output cplx_t       sym
);

  function automatic logic [15:0] qam_level(input logic b_hi, input logic b_lo);
    case ({b_hi, b_lo})
      2'b00:   return QAM_00;
      2'b01:   return QAM_01;
      2'b10:   return QAM_10;
      default: return QAM_11;
    endcase
  endfunction

  always_comb begin
    if (mod == MOD_QPSK) begin
      sym.re = bits[0] ? QPSK_1 : QPSK_0;
      sym.im = bits[1] ? QPSK_1 : QPSK_0;
    end else begin
      sym.re = qam_level(bits[0], bits[1]);
      sym.im = qam_level(bits[2], bits[3]);
    end
  end

  assign out_stb = in_stb;
  assign in_ack  = out_ack;

endmodule
