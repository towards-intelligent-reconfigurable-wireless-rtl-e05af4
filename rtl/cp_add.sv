// cp_add: cyclic-prefix insertion after the IFFT (Sec. IV-B of the paper).
//
// Loads the 64 time-domain samples of one OFDM symbol, then sends 80: the last 16 samples
// (48..63) first, followed by all 64. While sending, in_ack is low so the IFFT output waits.
// Handshake: wishbone-style strobe/acknowledge in and out. Latency: the first output sample
// is offered one clock after the 64th input sample; 80 clocks per symbol with a ready sink.
module cp_add
  import phy_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_stb,
  output logic  in_ack,
  input  cplx_t in_data,
  output logic  out_stb,
  input  logic  out_ack,
  output cplx_t out_data
);

  cplx_t      buf_q [N_FFT];
  logic [5:0] w_cnt;
  logic [6:0] r_cnt;
  logic       emit;
  logic [5:0] r_addr;

  assign in_ack   = !emit;
  assign out_stb  = emit;
  assign r_addr   = (r_cnt < 7'(N_CP)) ? 6'(r_cnt + 7'(N_FFT - N_CP)) : 6'(r_cnt - 7'(N_CP));
  assign out_data = buf_q[r_addr];

  always_ff @(posedge clk) begin
    if (!emit && in_stb) buf_q[w_cnt] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      emit  <= 1'b0;
      w_cnt <= '0;
      r_cnt <= '0;
    end else if (!emit) begin
      if (in_stb) begin
        w_cnt <= w_cnt + 1'b1;
        if (w_cnt == 6'd63) emit <= 1'b1;
      end
    end else if (out_ack) begin
      if (r_cnt == 7'(N_SYM - 1)) begin
        r_cnt <= '0;
        emit  <= 1'b0;
      end else begin
        r_cnt <= r_cnt + 1'b1;
      end
    end
  end

endmodule
