// phy_pkg: sample type, constants and sub-carrier maps of the OFDM transceiver.
//
// Samples are complex, 16-bit signed Q1.15 per component. The sub-carrier plan is the one of
// Fig. 6 of the paper: 64 IFFT bins, bin 0 is DC, bins 27..37 are null, pilots sit in bins 7,
// 21, 43 and 57, and the 48 data symbols fill the remaining bins in the order printed in the
// figure (symbols 0-4 in bins 38-42, 5-17 in 44-56, 18-23 in 58-63, 24-29 in 1-6, 30-42 in
// 8-20, 43-47 in 22-26). Constellation values are those of Table I of the paper. Pilot signs and
// the long-preamble signs follow IEEE 802.11a (the paper says the PHY is based on 802.11a but
// does not print them).
package phy_pkg;

  typedef struct packed {
    logic signed [15:0] re;
    logic signed [15:0] im;
  } cplx_t;

  typedef enum logic {
    MOD_QPSK  = 1'b0,
    MOD_QAM16 = 1'b1
  } mod_e;

  localparam int unsigned N_FFT   = 64;
  localparam int unsigned N_CP    = 16;
  localparam int unsigned N_SYM   = N_FFT + N_CP;   // 80 samples per OFDM symbol
  localparam int unsigned N_DATA  = 48;
  localparam int unsigned N_PILOT = 4;
  localparam int unsigned N_PRE   = 320;            // 160 short + 32 CP + 2 x 64 long
  localparam int unsigned LTF1_START = 192;         // first long training symbol (after its CP)
  localparam int unsigned LTF2_START = 256;

  // Table I (Q1.15)
  localparam logic [15:0] QPSK_0   = 16'hA57E;  // -0.7071
  localparam logic [15:0] QPSK_1   = 16'h5A82;  //  0.7071
  localparam logic [15:0] QAM_00   = 16'h8692;  // -0.9485
  localparam logic [15:0] QAM_01   = 16'h287A;  //  0.3162
  localparam logic [15:0] QAM_10   = 16'hD786;  // -0.3162
  localparam logic [15:0] QAM_11   = 16'h796E;  //  0.9485
  localparam logic signed [15:0] QAM_TH = 16'sh50F4;  // 0.6325, midway between 0.3162 and 0.9485
  localparam logic [15:0] PILOT_P  = 16'h7FFF;  // +1
  localparam logic [15:0] PILOT_N  = 16'h8001;  // -1

  // IFFT bin of data symbol d (Fig. 6)
  function automatic logic [5:0] data_bin(input logic [5:0] d);
    if (d <= 6'd4)       return d + 6'd38;
    else if (d <= 6'd17) return d + 6'd39;
    else if (d <= 6'd23) return d + 6'd40;
    else if (d <= 6'd29) return d - 6'd23;
    else if (d <= 6'd42) return d - 6'd22;
    else                 return d - 6'd21;
  endfunction

  // Kind of a bin: 0 = null/DC, 1 = data, 2 = pilot; for data bins also the symbol index.
  function automatic logic [1:0] bin_kind(input logic [5:0] b);
    if (b == 6'd7 || b == 6'd21 || b == 6'd43 || b == 6'd57) return 2'd2;
    if (b == 6'd0 || (b >= 6'd27 && b <= 6'd37))             return 2'd0;
    return 2'd1;
  endfunction

  function automatic logic [5:0] bin_data(input logic [5:0] b);
    if (b >= 6'd38 && b <= 6'd42)      return b - 6'd38;
    else if (b >= 6'd44 && b <= 6'd56) return b - 6'd39;
    else if (b >= 6'd58)               return b - 6'd40;
    else if (b >= 6'd1 && b <= 6'd6)   return b + 6'd23;
    else if (b >= 6'd8 && b <= 6'd20)  return b + 6'd22;
    else                               return b + 6'd21;
  endfunction

  // pilot number (0..3) of a pilot bin
  function automatic logic [1:0] bin_pilot(input logic [5:0] b);
    case (b)
      6'd7:    return 2'd0;
      6'd21:   return 2'd1;
      6'd43:   return 2'd2;
      default: return 2'd3;
    endcase
  endfunction

  // Sign of the 802.11a long training symbol in bin b: +1, -1 or 0 (unused bin).
  // Sub-carriers -26..26 map to bins (k mod 64).
  // bit (k+26) = 1 where L_k = +1, for k = -26..26
  localparam logic [52:0] LTF_POS  = 53'b11110101001100000101011001011110101100111111010110011;
  function automatic logic signed [1:0] ltf_sign(input logic [5:0] b);
    int k;
    k = (b >= 6'd32) ? int'(b) - 64 : int'(b);
    if (k < -26 || k > 26 || k == 0) return 2'sd0;
    return LTF_POS[k + 26] ? 2'sd1 : -2'sd1;
  endfunction

endpackage
