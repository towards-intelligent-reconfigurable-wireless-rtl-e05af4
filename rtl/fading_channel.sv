// fading_channel: transmit-side channel selection, the wireless-channel multiplication and the
// receive-side channel selection (Sec. IV-C, Fig. 1 "Channel Selection" and "Wireless
// Channels C1..CN", Fig. 7 "Wireless Fading Channel Model").
//
// The processor draws the fading coefficient of the selected channel for the slot and writes
// it, with the channel index, over AXI4-Lite (here wr/wr_idx/wr_coef). The block keeps one
// coefficient per channel, routes the transmit samples to the selected channel and multiplies
// them by its coefficient (complex, Q1.15, rounded and saturated); the receiver listens on the
// same channel. No noise is added here: in the paper the random part of the channel is drawn
// by the processor. Timing: one clock of latency per sample.
module fading_channel
  import phy_pkg::*;
#(
  parameter int unsigned K_MAX = 5,
  localparam int unsigned IDX_W = $clog2(K_MAX + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr,
  input  logic [IDX_W-1:0] wr_idx,
  input  cplx_t            wr_coef,
  input  logic             in_stb,
  input  cplx_t            in_data,
  output logic             out_stb,
  output cplx_t            out_data,
  output logic [IDX_W-1:0] sel_idx
);

  cplx_t coef [K_MAX];
  cplx_t h;
  assign h = (sel_idx != '0 && sel_idx <= IDX_W'(K_MAX)) ? coef[sel_idx - 1'b1] : '0;

  function automatic logic signed [15:0] rnd_sat(input logic signed [33:0] v);
    logic signed [33:0] r;
    r = (v + 34'sd16384) >>> 15;
    if (r > 34'sd32767)  return 16'sd32767;
    if (r < -34'sd32768) return -16'sd32768;
    return r[15:0];
  endfunction

  logic signed [33:0] pr, pi;
  always_comb begin
    pr = 34'(in_data.re * h.re) - 34'(in_data.im * h.im);
    pi = 34'(in_data.re * h.im) + 34'(in_data.im * h.re);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel_idx  <= '0;
      out_stb  <= 1'b0;
      out_data <= '0;
      for (int k = 0; k < K_MAX; k++) coef[k] <= '0;
    end else begin
      if (wr && wr_idx != '0 && wr_idx <= IDX_W'(K_MAX)) begin
        coef[wr_idx - 1'b1] <= wr_coef;
        sel_idx             <= wr_idx;
      end
      out_stb <= in_stb;
      if (in_stb) begin
        out_data.re <= rnd_sat(pr);
        out_data.im <= rnd_sat(pi);
      end
    end
  end

endmodule
