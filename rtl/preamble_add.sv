// preamble_add: preamble insertion and frame scheduling of the transmitter (Sec. IV-B of the
// paper: "preamble samples are fixed and are stored in block memory ... The preamble addition
// block includes the scheduler").
//
// On a start pulse (one per time slot) the block sends the 320-sample IEEE 802.11a preamble
// (ten 16-sample short symbols, a 32-sample cyclic prefix and two 64-sample long symbols) from
// a ROM, then passes NSYM payload symbols of 80 samples each from cp_add, then goes idle.
// The ROM is initialised from preamble.hex: x[t] = (1/64) * sum_k X_k exp(j*2*pi*k*t/64), the
// 802.11a short and long training sequences, rounded to Q1.15 (the same scale as the IFFT).
// Output: one sample per strobe, no back-pressure (it feeds the channel); payload gaps while
// cp_add reloads are allowed because every later block is strobe-driven.
// Follows the paper in the preamble length and its storage; NSYM = 1 data symbol per slot
// follows Sec. VI-B ("48 ... symbols ... equivalent to 96 and 192 bits").
module preamble_add
  import phy_pkg::*;
#(
  parameter int unsigned NSYM = 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  logic  in_stb,
  output logic  in_ack,
  input  cplx_t in_data,
  output logic  out_stb,
  output cplx_t out_data,
  output logic  busy
);

  typedef enum logic [1:0] {P_IDLE, P_PRE, P_PAY} state_e;
  state_e state;

  logic [31:0] rom [N_PRE];
  initial $readmemh("rtl/preamble.hex", rom);

  logic [8:0]  p_cnt;
  logic [15:0] s_cnt;
  logic [31:0] rom_q;
  assign rom_q = rom[p_cnt];

  assign in_ack = (state == P_PAY);
  assign busy   = (state != P_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= P_IDLE;
      p_cnt    <= '0;
      s_cnt    <= '0;
      out_stb  <= 1'b0;
      out_data <= '0;
    end else begin
      out_stb <= 1'b0;
      case (state)
        P_IDLE: if (start) begin
          state <= P_PRE;
          p_cnt <= '0;
        end
        P_PRE: begin
          out_stb  <= 1'b1;
          out_data <= rom_q;
          p_cnt    <= p_cnt + 1'b1;
          if (p_cnt == 9'(N_PRE - 1)) begin
            state <= P_PAY;
            s_cnt <= '0;
          end
        end
        P_PAY: if (in_stb) begin
          out_stb  <= 1'b1;
          out_data <= in_data;
          s_cnt    <= s_cnt + 1'b1;
          if (s_cnt == 16'(NSYM * N_SYM - 1)) state <= P_IDLE;
        end
        default: state <= P_IDLE;
      endcase
    end
  end

endmodule
