// mab_pkg: types, constants and fixed-point helpers shared by the multi-armed-bandit (MAB)
// learning blocks (IPU, QF units, selector tree).
//
// Number formats. The QF datapath works on unsigned fixed-point words of WL bits with F = WL-5
// fractional bits (UQ5.F). Five integer bits hold every intermediate value of Eq. (1), (6) and (7)
// for horizons up to 2^16 slots (ln(65535) = 11.1, alpha*ln(n) <= 22.2). The paper quotes the
// word-lengths (27, 11, 6) but not the integer/fraction split; the split is this design's choice.
// Every helper works on 64-bit values and saturates to WL bits where the caller asks for it.
package mab_pkg;

  // Content of one reconfigurable region (RR) of the QF stage. The paper loads one of these by
  // partial reconfiguration; here the choice is a run-time configuration input.
  typedef enum logic [1:0] {
    RR_BLANK = 2'd0,
    RR_UCB   = 2'd1,
    RR_UCBV  = 2'd2,
    RR_UCBT  = 2'd3
  } rr_cfg_e;

  localparam int unsigned FB_W     = 32;     // feedback word, one AXI4-Lite register
  localparam int unsigned INT_BITS = 5;      // integer bits of the QF word
  localparam logic [63:0] LN2_Q16  = 64'd45426;  // ln(2) * 2^16

  // Saturate an unsigned value to w bits.
  function automatic logic [63:0] fx_sat(input logic [63:0] v, input int unsigned w);
    logic [63:0] maxv;
    maxv = (64'd1 << w) - 64'd1;
    return (v > maxv) ? maxv : v;
  endfunction

  // (a * b) >> f, both unsigned with f fractional bits.
  function automatic logic [63:0] fx_mul(input logic [63:0] a, input logic [63:0] b,
                                         input int unsigned f);
    return (a * b) >> f;
  endfunction

  // (num << f) / den; a zero denominator returns all ones (saturates later).
  function automatic logic [63:0] fx_div(input logic [63:0] num, input logic [63:0] den,
                                         input int unsigned f);
    if (den == 64'd0) return '1;
    return (num << f) / den;
  endfunction

  // Integer square root, digit by digit (restoring), 32 iterations.
  function automatic logic [63:0] isqrt64(input logic [63:0] x);
    logic [63:0] rem, root, b;
    rem  = x;
    root = '0;
    b    = 64'h4000_0000_0000_0000;
    for (int i = 0; i < 32; i++) begin
      if (rem >= root + b) begin
        rem  = rem - (root + b);
        root = (root >> 1) + b;
      end else begin
        root = root >> 1;
      end
      b = b >> 2;
    end
    return root;
  endfunction

  // sqrt of a UQ.f value, result UQ.f.
  function automatic logic [63:0] fx_sqrt(input logic [63:0] a, input int unsigned f);
    return isqrt64(a << f);
  endfunction

  // log2 of a positive integer n as UQ.f: position of the leading one plus the bits below it
  // read as a linear fraction (Mitchell's approximation, max error 0.086).
  function automatic logic [63:0] fx_log2(input logic [31:0] n, input int unsigned f);
    int unsigned p;
    logic [63:0] rest;
    p = 0;
    for (int i = 0; i < 32; i++) if (n[i]) p = i;
    rest = {32'd0, n} - (64'd1 << p);
    return (64'(p) << f) + ((rest << f) >> p);
  endfunction

  // Natural logarithm of a positive integer n as UQ.f: log2(n) * ln(2).
  function automatic logic [63:0] fx_ln(input logic [31:0] n, input int unsigned f);
    return (fx_log2(n, f) * LN2_Q16) >> 16;
  endfunction

endpackage
