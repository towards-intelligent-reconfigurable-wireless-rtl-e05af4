// qf_ucbt: quality-factor (QF) unit for one arm, UCB_T algorithm, Eq. (7).
//
// Qt = Y/T - (X/T)^2 + sqrt(alpha*ln(n)/T), clamped at 0 (the variance term can go slightly negative after rounding). The input alpha2 is unused by this algorithm; it keeps the three QF units port-compatible.
// All operands are unsigned fixed point UQ5.F (F = WL-5 fractional bits); every intermediate
// result (division, product, logarithm, square root) is saturated back to WL bits, which is
// how the word-length WL of the paper's fixed-point variants is modelled. ln(n) uses the
// leading-one position plus a linear fraction (see mab_pkg). An arm never played (T = 0) gets
// the largest QF.
//
// Interface: one AXI4-Stream-like input beat (in_valid/in_ready) carrying X, Y, T, n of this
// arm, one output beat (out_valid/out_ready) carrying Q. The arithmetic is a single
// combinational cloud and the result is registered: latency one clock, one result per clock.
// The dataflow follows Fig. 4 of the paper; the number format, the logarithm approximation and
// the saturation are this design's choices (the paper gives only the word-lengths).
// Lint note: the arithmetic helpers work on 64-bit values; only the WL saturated low bits of
// the result are used, so lint reports the upper bits of q_c as unused.
module qf_ucbt
  import mab_pkg::*;
#(
  parameter int unsigned WL    = 11,
  parameter int unsigned CNT_W = 16,
  localparam int unsigned F    = WL - INT_BITS,
  localparam int unsigned XW   = CNT_W + F
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [XW-1:0]    x,
  input  logic [XW-1:0]    y,
  input  logic [CNT_W-1:0] t,
  input  logic [CNT_W-1:0] n,
  input  logic [WL-1:0]    alpha,
  input  logic [WL-1:0]    alpha2,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WL-1:0]    q
);

  logic [63:0] q_c;

  logic [63:0] mean, msq, yt, lnn, a_ln, e, s, pos;
  always_comb begin
    mean = fx_sat(fx_div(64'(x), 64'(t), 0), WL);
    msq  = fx_sat(fx_mul(mean, mean, F), WL);
    yt   = fx_sat(fx_div(64'(y), 64'(t), 0), WL);
    lnn  = fx_sat(fx_ln(32'(n), F), WL);
    a_ln = fx_sat(fx_mul(64'(alpha), lnn, F), WL);
    e    = fx_sat(fx_div(a_ln, 64'(t), 0), WL);
    s    = fx_sat(fx_sqrt(e, F), WL);
    pos  = yt + s;
    q_c  = (pos > msq) ? fx_sat(pos - msq, WL) : 64'd0;
  end
  logic unused_ok;
  assign unused_ok = ^alpha2;

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      q         <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) q <= (t == '0) ? '1 : WL'(q_c);
    end
  end

endmodule
