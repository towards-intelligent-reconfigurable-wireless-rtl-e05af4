// irphy_top: intelligent and reconfigurable OFDM PHY (Fig. 1 and Fig. 7 of the paper).
//
// Programmable-logic part of the system. The processor (outside) acts through these ports:
//  * fb_valid/fb_data: the per-slot feedback word of the MAB learner (arm used, reward, INIT);
//    the learner answers with sel_valid/sel_idx, the arm (wireless channel) for the next slot.
//  * k_active, rr_cfg, alpha*: the configuration that partial reconfiguration changes in the
//    paper (number of arms and the QF algorithm of each region).
//  * mod_sel: QPSK or 16-QAM for the slot (chosen by the processor from the learnt statistics).
//  * chan_wr/chan_wr_idx/chan_wr_coef: channel index and fading coefficient of the slot.
//  * slot_start: starts the transmission of one frame (preamble + NSYM symbols) and resets
//    the receiver, as the paper resets transmitter and receiver after every slot.
//  * tx_stb/tx_ack/tx_bits: the (already channel-coded) bits, 2 or 4 per data symbol.
//  * rx_stb/rx_bits: decoded bits in the same order; reward_valid/reward: P_rx/P_tx of the
//    slot's pilots, which the processor puts into the next feedback word.
// The 64-point IFFT and FFT are vendor cores in the paper and are outside this module: the
// resource mapper feeds ifft_in_*, ifft_out_* returns the time samples (strobe/acknowledge),
// the receiver feeds fft_in_* and fft_out_* returns 64 bins in natural order.
// Transmit chain: qam_mapper -> resource_mapper -> IFFT -> cp_add -> preamble_add ->
// fading_channel. Receive chain: sync_autocorr -> rx_framer -> FFT -> chan_est -> chan_eq ->
// qam_demapper. Channel coding/decoding and frequency-offset correction are not included.
// All blocks share one clock (the paper uses a faster clock for 16-QAM than for QPSK).
module irphy_top
  import mab_pkg::*;
  import phy_pkg::*;
#(
  parameter int unsigned K_MAX   = 5,
  parameter int unsigned WL      = 11,
  parameter int unsigned CNT_W   = 16,
  parameter int unsigned NSYM    = 1,
  localparam int unsigned IDX_W  = $clog2(K_MAX + 1),
  localparam int unsigned RW     = FB_W - IDX_W - 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // MAB learner
  input  logic [IDX_W-1:0] k_active,
  input  rr_cfg_e          rr_cfg [K_MAX],
  input  logic [WL-1:0]    alpha,
  input  logic [WL-1:0]    alpha1,
  input  logic [WL-1:0]    alpha2,
  input  logic             fb_valid,
  input  logic [FB_W-1:0]  fb_data,
  output logic             sel_valid,
  output logic [IDX_W-1:0] sel_idx,
  output logic             mab_learn,
  output logic             mab_busy,
  // slot control
  input  mod_e             mod_sel,
  input  logic             slot_start,
  input  logic             chan_wr,
  input  logic [IDX_W-1:0] chan_wr_idx,
  input  cplx_t            chan_wr_coef,
  // transmit data
  input  logic             tx_stb,
  output logic             tx_ack,
  input  logic [3:0]       tx_bits,
  // IFFT core
  output logic             ifft_in_stb,
  output cplx_t            ifft_in_data,
  output logic             ifft_in_last,
  input  logic             ifft_in_ack,
  input  logic             ifft_out_stb,
  input  cplx_t            ifft_out_data,
  output logic             ifft_out_ack,
  // channel output (antenna side, for observation)
  output logic             air_stb,
  output cplx_t            air_data,
  // FFT core
  output logic             fft_in_stb,
  output cplx_t            fft_in_data,
  output logic             fft_in_last,
  input  logic             fft_out_stb,
  input  cplx_t            fft_out_data,
  // receive results
  output logic             frame_det,
  output logic             rx_stb,
  output logic [3:0]       rx_bits,
  output logic             reward_valid,
  output logic [RW-1:0]    reward,
  output logic             tx_busy
);

  // ---------------- MAB learner ----------------
  logic [WL-1:0] sel_q;
  mab_core #(.K_MAX(K_MAX), .WL(WL), .CNT_W(CNT_W)) u_mab (
    .clk, .rst_n, .k_active, .rr_cfg, .alpha, .alpha1, .alpha2, .fb_valid, .fb_data,
    .sel_valid, .sel_idx, .sel_q, .learn(mab_learn), .busy(mab_busy));

  // ---------------- transmitter ----------------
  logic  map_stb, map_ack;
  cplx_t map_sym;
  qam_mapper u_map (.mod(mod_sel), .in_stb(tx_stb), .in_ack(tx_ack), .bits(tx_bits),
                    .out_stb(map_stb), .out_ack(map_ack), .sym(map_sym));

  resource_mapper u_rmap (.clk, .rst_n, .in_stb(map_stb), .in_ack(map_ack), .in_sym(map_sym),
                          .out_stb(ifft_in_stb), .out_ack(ifft_in_ack), .out_sym(ifft_in_data),
                          .out_last(ifft_in_last));

  logic  cp_stb, cp_ack;
  cplx_t cp_data;
  cp_add u_cp (.clk, .rst_n, .in_stb(ifft_out_stb), .in_ack(ifft_out_ack), .in_data(ifft_out_data),
               .out_stb(cp_stb), .out_ack(cp_ack), .out_data(cp_data));

  logic  tx_stb_o;
  cplx_t tx_data_o;
  preamble_add #(.NSYM(NSYM)) u_pre (.clk, .rst_n, .start(slot_start), .in_stb(cp_stb),
                                     .in_ack(cp_ack), .in_data(cp_data), .out_stb(tx_stb_o),
                                     .out_data(tx_data_o), .busy(tx_busy));

  // ---------------- wireless channel ----------------
  logic [IDX_W-1:0] ch_sel;
  fading_channel #(.K_MAX(K_MAX)) u_chan (.clk, .rst_n, .wr(chan_wr), .wr_idx(chan_wr_idx),
                                          .wr_coef(chan_wr_coef), .in_stb(tx_stb_o),
                                          .in_data(tx_data_o), .out_stb(air_stb),
                                          .out_data(air_data), .sel_idx(ch_sel));

  // ---------------- receiver ----------------
  logic  sy_stb, sy_det, sy_lvl;
  cplx_t sy_data;
  sync_autocorr u_sync (.clk, .rst_n, .clear(slot_start), .in_stb(air_stb), .in_data(air_data),
                        .out_stb(sy_stb), .out_data(sy_data), .out_det(sy_det),
                        .out_level(sy_lvl));
  assign frame_det = sy_det;

  logic fr_in_frame, fr_done;
  rx_framer #(.NSYM(NSYM)) u_frm (.clk, .rst_n, .clear(slot_start), .in_stb(sy_stb),
                                  .in_data(sy_data), .in_det(sy_det), .fft_stb(fft_in_stb),
                                  .fft_data(fft_in_data), .fft_last(fft_in_last),
                                  .in_frame(fr_in_frame), .done(fr_done));

  logic       ce_stb;
  cplx_t      ce_y, ce_h;
  logic [5:0] ce_bin;
  chan_est #(.NSYM(NSYM), .RW(RW)) u_est (.clk, .rst_n, .clear(slot_start), .in_stb(fft_out_stb),
                                          .in_data(fft_out_data), .out_stb(ce_stb), .out_y(ce_y),
                                          .out_h(ce_h), .out_bin(ce_bin),
                                          .reward_valid, .reward);

  logic       eq_stb;
  cplx_t      eq_sym;
  logic [5:0] eq_idx;
  chan_eq u_eq (.clk, .rst_n, .in_stb(ce_stb), .in_y(ce_y), .in_h(ce_h), .in_bin(ce_bin),
                .out_stb(eq_stb), .out_sym(eq_sym), .out_idx(eq_idx));

  qam_demapper u_demap (.clk, .rst_n, .mod(mod_sel), .in_stb(eq_stb), .sym(eq_sym),
                        .out_stb(rx_stb), .bits(rx_bits));

  logic unused_ok;
  assign unused_ok = ^{sel_q, ch_sel, sy_lvl, fr_in_frame, fr_done, eq_idx};

endmodule
