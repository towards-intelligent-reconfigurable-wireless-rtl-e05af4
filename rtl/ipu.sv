// ipu: Initialization and Parameter Update block of the MAB learner.
//
// Each slot the processor writes one 32-bit feedback word (an AXI4-Lite register in the SoC,
// here fb_valid/fb_data). Bit layout, from the least significant bit:
//   [IDX_W-1:0]  arm I(n-1) that was used in the previous slot, 1-based (0 = none)
//   [IDX_W]      INIT: 1 resets the learner and starts a new experiment
//   [31:IDX_W+1] reward R(n-1) as an unsigned fraction (R / 2^RW), 0 <= R < 1
// The decoder turns the word into per-arm enables. For the arm named in the word the update
// units add R to X(k), R^2 to Y(k) and 1 to T(k) (Eq. 2, 4, 9); the slot counter n is
// incremented. INIT clears X, Y, T and sets n = 1.
//
// Mode: while n <= K (k_active arms) the block is in INIT mode and chooses the arm itself with a
// maximal-length LFSR whose outputs above K are skipped, so the K INIT slots visit every arm once
// in pseudo-random order; the QF and selection stages stay idle. Once n > K (LEARN mode) the
// updated statistics are offered to the QF units on one broadcast AXI4-Stream-like handshake
// (stat_valid / stat_ready, held until accepted).
//
// Timing: an update takes one clock; an INIT pick takes one clock per LFSR step (at most
// 2^IDX_W - 1 steps). A new feedback word must not arrive while busy (asserted).
// Follows the paper: word layout (Fig. 3), update/INC units and decoder (Fig. 2), INIT/LEARN
// modes and reset values X=Y=T=0, n=1 (Sec. V). This design's choices: reward truncated to F
// fractional bits, counters CNT_W bits wide and saturating, LFSR polynomials and seed.
// Lint notes: the low reward bits and the low half of r_f*r_f are unused on purpose (the
// reward is truncated to F bits). The assertions use rst_n in 'disable iff', which lint reports
// as a reset used both synchronously and asynchronously; they are checks only, not logic.
module ipu
  import mab_pkg::*;
#(
  parameter int unsigned K_MAX = 5,
  parameter int unsigned WL    = 11,
  parameter int unsigned CNT_W = 16,
  localparam int unsigned IDX_W = $clog2(K_MAX + 1),
  localparam int unsigned F     = WL - INT_BITS,
  localparam int unsigned RW    = FB_W - IDX_W - 1,
  localparam int unsigned XW    = CNT_W + F
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [IDX_W-1:0]      k_active,
  input  logic                  fb_valid,
  input  logic [FB_W-1:0]       fb_data,
  // statistics towards the QF units (LEARN mode)
  output logic                  stat_valid,
  input  logic                  stat_ready,
  output logic [XW-1:0]         x_o [K_MAX],
  output logic [XW-1:0]         y_o [K_MAX],
  output logic [CNT_W-1:0]      t_o [K_MAX],
  output logic [CNT_W-1:0]      n_o,
  // arm chosen in INIT mode
  output logic                  init_sel_valid,
  output logic [IDX_W-1:0]      init_sel_idx,
  output logic                  learn,
  output logic                  busy
);

  typedef enum logic [1:0] {S_IDLE, S_PICK, S_STREAM} state_e;
  state_e state;

  // decoder
  logic [RW-1:0]    fb_r;
  logic             fb_init;
  logic [IDX_W-1:0] fb_idx;
  assign fb_idx  = fb_data[IDX_W-1:0];
  assign fb_init = fb_data[IDX_W];
  assign fb_r    = fb_data[FB_W-1:IDX_W+1];

  logic [F-1:0]  r_f;     // reward, UQ0.F
  logic [F-1:0]  r2_f;    // reward squared, UQ0.F
  logic [2*F-1:0] r_sq;
  assign r_f  = fb_r[RW-1 -: F];
  assign r_sq = r_f * r_f;
  assign r2_f = r_sq[2*F-1 -: F];

  logic [K_MAX-1:0] arm_en;
  always_comb begin
    for (int k = 0; k < K_MAX; k++) arm_en[k] = (fb_idx == IDX_W'(k + 1));
  end

  logic [XW-1:0]    x_q [K_MAX];
  logic [XW-1:0]    y_q [K_MAX];
  logic [CNT_W-1:0] t_q [K_MAX];
  logic [CNT_W-1:0] n_q;
  localparam logic [CNT_W-1:0] CNT_MAX = '1;
  localparam logic [XW-1:0]    X_MAX   = '1;

  // LFSR, Galois form, maximal-length taps for widths 2..8
  function automatic logic [IDX_W-1:0] lfsr_taps();
    case (IDX_W)
      1:       return IDX_W'(1);
      2:       return IDX_W'(2'b11);
      3:       return IDX_W'(3'b110);
      4:       return IDX_W'(4'b1100);
      5:       return IDX_W'(5'b10100);
      6:       return IDX_W'(6'b110000);
      7:       return IDX_W'(7'b1100000);
      default: return IDX_W'(8'b10111000);
    endcase
  endfunction
  localparam logic [IDX_W-1:0] TAPS = lfsr_taps();

  logic [IDX_W-1:0] lfsr;
  logic [IDX_W-1:0] lfsr_next;
  logic             lfsr_hit;
  assign lfsr_next = lfsr[0] ? ((lfsr >> 1) ^ TAPS) : (lfsr >> 1);
  // IDX_W = 1 has a single non-zero state; it is always a hit for K = 1.
  assign lfsr_hit  = (lfsr != '0) && (lfsr <= k_active);

  logic [CNT_W-1:0] n_after;
  assign n_after = (n_q == CNT_MAX) ? n_q : n_q + 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      n_q            <= CNT_W'(1);
      lfsr           <= IDX_W'(1);
      init_sel_valid <= 1'b0;
      init_sel_idx   <= '0;
      for (int k = 0; k < K_MAX; k++) begin
        x_q[k] <= '0;
        y_q[k] <= '0;
        t_q[k] <= '0;
      end
    end else begin
      init_sel_valid <= 1'b0;
      case (state)
        S_IDLE: begin
          if (fb_valid) begin
            if (fb_init) begin
              for (int k = 0; k < K_MAX; k++) begin
                x_q[k] <= '0;
                y_q[k] <= '0;
                t_q[k] <= '0;
              end
              n_q   <= CNT_W'(1);
              state <= S_PICK;
            end else if (fb_idx != '0 && fb_idx <= IDX_W'(K_MAX)) begin
              for (int k = 0; k < K_MAX; k++) begin
                if (arm_en[k]) begin
                  x_q[k] <= (x_q[k] > X_MAX - XW'(r_f))  ? X_MAX : x_q[k] + XW'(r_f);
                  y_q[k] <= (y_q[k] > X_MAX - XW'(r2_f)) ? X_MAX : y_q[k] + XW'(r2_f);
                  t_q[k] <= (t_q[k] == CNT_MAX) ? t_q[k] : t_q[k] + 1'b1;
                end
              end
              n_q   <= n_after;
              state <= (n_after <= CNT_W'(k_active)) ? S_PICK : S_STREAM;
            end
          end
        end
        S_PICK: begin
          lfsr <= lfsr_next;
          if (lfsr_hit) begin
            init_sel_valid <= 1'b1;
            init_sel_idx   <= lfsr;
            state          <= S_IDLE;
          end
        end
        S_STREAM: begin
          if (stat_ready) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign stat_valid = (state == S_STREAM);
  assign x_o  = x_q;
  assign y_o  = y_q;
  assign t_o  = t_q;
  assign n_o  = n_q;
  assign learn = (n_q > CNT_W'(k_active));
  assign busy  = (state != S_IDLE);

  // The processor waits for the chosen arm before writing the next feedback word.
  a_no_fb_when_busy: assert property (@(posedge clk) disable iff (!rst_n) fb_valid |-> !busy);
  // k_active must name at least one arm and no more than the block holds.
  a_k_range: assert property (@(posedge clk) disable iff (!rst_n)
                              fb_valid |-> (k_active != '0 && k_active <= IDX_W'(K_MAX)));

endmodule
