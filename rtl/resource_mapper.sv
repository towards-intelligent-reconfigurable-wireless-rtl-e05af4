// resource_mapper: places one OFDM symbol's 48 data symbols and 4 pilots into the 64 IFFT bins
// (Sec. IV-B and Fig. 6 of the paper; the paper calls it a serial-to-parallel converter).
//
// Fill phase: 48 data symbols are accepted one per strobe and written to the bin given by the
// map of Fig. 6 (phy_pkg::data_bin). Emit phase: bins 0..63 are sent to the IFFT in order, data
// bins from the buffer, pilot bins from pilot_rom, DC and the 11 null bins as zero; out_last
// marks bin 63. While emitting, in_ack is low (the mapper stalls the modulator).
// Handshake: wishbone-style strobe/acknowledge on both sides. Throughput: 48 + 64 clocks per
// OFDM symbol with a ready sink.
module resource_mapper
  import phy_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_stb,
  output logic  in_ack,
  input  cplx_t in_sym,
  output logic  out_stb,
  input  logic  out_ack,
  output cplx_t out_sym,
  output logic  out_last
);

  cplx_t      buf_q [N_FFT];
  logic [5:0] d_cnt, b_cnt;
  logic       emit;
  cplx_t      pilot;

  pilot_rom u_pilot (.addr(bin_pilot(b_cnt)), .pilot);

  assign in_ack  = !emit;
  assign out_stb = emit;
  assign out_last = emit && (b_cnt == 6'd63);

  always_comb begin
    case (bin_kind(b_cnt))
      2'd1:    out_sym = buf_q[b_cnt];
      2'd2:    out_sym = pilot;
      default: out_sym = '0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!emit && in_stb) buf_q[data_bin(d_cnt)] <= in_sym;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      emit  <= 1'b0;
      d_cnt <= '0;
      b_cnt <= '0;
    end else if (!emit) begin
      if (in_stb) begin
        if (d_cnt == 6'(N_DATA - 1)) begin
          d_cnt <= '0;
          emit  <= 1'b1;
        end else begin
          d_cnt <= d_cnt + 1'b1;
        end
      end
    end else if (out_ack) begin
      b_cnt <= b_cnt + 1'b1;
      if (b_cnt == 6'd63) emit <= 1'b0;
    end
  end

endmodule
