// rx_framer: receiver symbol framing and cyclic-prefix removal (Sec. IV-D: "These transitions
// are used to identify the start of the OFDM symbol, and hence, CP can be easily removed").
//
// The detector of sync_autocorr flags one sample per frame. Without noise that sample sits at
// a fixed position DET_POS of the frame (the metric does not change when the whole frame is
// scaled by a complex fading coefficient), so the framer numbers the following samples from
// DET_POS + 1 and forwards to the FFT: the two long training symbols (frame samples 192..255
// and 256..319) and, for each of the NSYM payload symbols, samples 16..79 of its 80 (CP
// dropped). fft_last marks the 64th sample of each window. After the last payload symbol it
// waits for clear (start of the next slot).
// The 0.75 threshold is first crossed at frame sample 42 or 43 of the stored preamble (seen in
// simulation). DET_POS = 46 deliberately numbers samples 4 positions ahead, so every FFT window
// starts 4 samples inside its cyclic prefix: that is a cyclic shift that the channel estimate
// absorbs, and detection anywhere from sample 30 to 46 still gives correct windows. This is
// this design's calibration; the paper gives no timing-recovery details beyond the detector.
module rx_framer
  import phy_pkg::*;
#(
  parameter int unsigned NSYM    = 1,
  parameter int unsigned DET_POS = 46
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  logic  in_stb,
  input  cplx_t in_data,
  input  logic  in_det,
  output logic  fft_stb,
  output cplx_t fft_data,
  output logic  fft_last,
  output logic  in_frame,
  output logic  done
);

  typedef enum logic [1:0] {F_SEARCH, F_PRE, F_PAY, F_DONE} state_e;
  state_e state;
  logic [8:0]  c_cnt;      // frame sample index during the preamble
  logic [6:0]  j_cnt;      // sample index inside a payload symbol
  logic [15:0] m_cnt;      // payload symbol number

  logic take;
  always_comb begin
    take = 1'b0;
    if (in_stb) begin
      if (state == F_PRE) take = (c_cnt >= 9'(LTF1_START));
      else if (state == F_PAY) take = (j_cnt >= 7'(N_CP));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= F_SEARCH;
      c_cnt <= '0; j_cnt <= '0; m_cnt <= '0;
      fft_stb <= 1'b0; fft_data <= '0; fft_last <= 1'b0;
    end else if (clear) begin
      state <= F_SEARCH;
      c_cnt <= '0; j_cnt <= '0; m_cnt <= '0;
      fft_stb <= 1'b0; fft_last <= 1'b0;
    end else begin
      fft_stb  <= take;
      fft_last <= 1'b0;
      if (take) fft_data <= in_data;
      case (state)
        F_SEARCH: if (in_stb && in_det) begin
          state <= F_PRE;
          c_cnt <= 9'(DET_POS + 1);
        end
        F_PRE: if (in_stb) begin
          fft_last <= (c_cnt == 9'(LTF2_START - 1)) || (c_cnt == 9'(N_PRE - 1));
          if (c_cnt == 9'(N_PRE - 1)) begin
            state <= F_PAY;
            j_cnt <= '0;
            m_cnt <= '0;
          end else begin
            c_cnt <= c_cnt + 1'b1;
          end
        end
        F_PAY: if (in_stb) begin
          if (j_cnt == 7'(N_SYM - 1)) begin
            fft_last <= 1'b1;
            j_cnt    <= '0;
            m_cnt    <= m_cnt + 1'b1;
            if (m_cnt == 16'(NSYM - 1)) state <= F_DONE;
          end else begin
            j_cnt <= j_cnt + 1'b1;
          end
        end
        default: ;
      endcase
    end
  end

  assign in_frame = (state == F_PRE) || (state == F_PAY);
  assign done     = (state == F_DONE);

endmodule
