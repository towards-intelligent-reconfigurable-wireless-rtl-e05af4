// chan_est: channel estimation and reward measurement of the receiver (Sec. IV-D and Sec. III:
// "the reward is the ratio of received pilot power to the transmitted pilot power").
//
// Input: FFT output bins 0..63 of each received symbol of a slot, in order: the two long
// training symbols, then NSYM payload symbols. For every bin the estimate is
//   H[b] = (Y1[b] + Y2[b]) / 2 * L[b]
// with L[b] = +-1 the known 802.11a long-training value (multiplication by the transmitted
// preamble symbol, as the paper puts it; 0 bins stay 0). Payload bins leave with their estimate
// H[b] to the equaliser. The pilot bins of the payload add |Y|^2 to the received pilot power and
// |P|^2 (from pilot_rom) to the transmitted one; after the last payload symbol the reward
// R = P_rx / P_tx is output as an unsigned fraction of RW bits, saturated just below 1 (the
// feedback word has no room for R = 1).
// Timing: one bin per strobe, outputs registered (one clock); reward one clock after the last
// bin. clear (start of slot) restarts the symbol count and the power sums.
module chan_est
  import phy_pkg::*;
#(
  parameter int unsigned NSYM = 1,
  parameter int unsigned RW   = 28
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          in_stb,
  input  cplx_t         in_data,
  output logic          out_stb,
  output cplx_t         out_y,
  output cplx_t         out_h,
  output logic [5:0]    out_bin,
  output logic          reward_valid,
  output logic [RW-1:0] reward
);

  cplx_t       h_q [N_FFT];
  logic [5:0]  b_cnt;
  logic [15:0] s_cnt;
  logic [47:0] p_rx, p_tx;
  cplx_t       pilot;
  logic signed [1:0] sgn;
  logic signed [16:0] l_re, l_im, avg_re, avg_im;
  logic        last_bin;

  pilot_rom u_pilot (.addr(bin_pilot(b_cnt)), .pilot);

  assign sgn = ltf_sign(b_cnt);
  always_comb begin
    // Y * L, L = +-1 or 0
    l_re = (sgn == 2'sd1) ? 17'(in_data.re) : (sgn == -2'sd1) ? -17'(in_data.re) : 17'sd0;
    l_im = (sgn == 2'sd1) ? 17'(in_data.im) : (sgn == -2'sd1) ? -17'(in_data.im) : 17'sd0;
    avg_re = (17'(h_q[b_cnt].re) + l_re) >>> 1;
    avg_im = (17'(h_q[b_cnt].im) + l_im) >>> 1;
  end

  function automatic logic signed [15:0] sat16(input logic signed [16:0] v);
    if (v > 17'sd32767)  return 16'sd32767;
    if (v < -17'sd32768) return -16'sd32768;
    return v[15:0];
  endfunction

  assign last_bin = (b_cnt == 6'd63);

  logic [47:0] pw_rx, pw_tx;
  assign pw_rx = 48'($signed(in_data.re) * $signed(in_data.re)) + 48'($signed(in_data.im) * $signed(in_data.im));
  assign pw_tx = 48'($signed(pilot.re) * $signed(pilot.re)) + 48'($signed(pilot.im) * $signed(pilot.im));

  logic [47:0] p_rx_n, p_tx_n;
  logic [63:0] ratio;
  always_comb begin
    p_rx_n = p_rx;
    p_tx_n = p_tx;
    if (s_cnt >= 16'd2 && bin_kind(b_cnt) == 2'd2) begin
      p_rx_n = p_rx + pw_rx;
      p_tx_n = p_tx + pw_tx;
    end
    ratio = (p_tx_n == '0) ? '0 : ({16'd0, p_rx_n} << RW) / {16'd0, p_tx_n};
    if (ratio > 64'((64'd1 << RW) - 1)) ratio = 64'((64'd1 << RW) - 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_cnt <= '0; s_cnt <= '0; p_rx <= '0; p_tx <= '0;
      out_stb <= 1'b0; out_y <= '0; out_h <= '0; out_bin <= '0;
      reward_valid <= 1'b0; reward <= '0;
      for (int i = 0; i < N_FFT; i++) h_q[i] <= '0;
    end else if (clear) begin
      b_cnt <= '0; s_cnt <= '0; p_rx <= '0; p_tx <= '0;
      out_stb <= 1'b0; reward_valid <= 1'b0;
    end else begin
      out_stb      <= 1'b0;
      reward_valid <= 1'b0;
      if (in_stb) begin
        b_cnt <= b_cnt + 1'b1;
        if (last_bin) s_cnt <= s_cnt + 1'b1;
        if (s_cnt == 16'd0) begin
          h_q[b_cnt].re <= sat16(l_re);
          h_q[b_cnt].im <= sat16(l_im);
        end else if (s_cnt == 16'd1) begin
          h_q[b_cnt].re <= sat16(avg_re);
          h_q[b_cnt].im <= sat16(avg_im);
        end else if (s_cnt < 16'(NSYM + 2)) begin
          out_stb <= 1'b1;
          out_y   <= in_data;
          out_h   <= h_q[b_cnt];
          out_bin <= b_cnt;
          p_rx    <= p_rx_n;
          p_tx    <= p_tx_n;
          if (last_bin && s_cnt == 16'(NSYM + 1)) begin
            reward_valid <= 1'b1;
            reward       <= RW'(ratio);
          end
        end
      end
    end
  end

endmodule
