// mab_core: the reconfigurable multi-armed-bandit learner (Sec. III and Fig. 7 of the paper).
//
// One slot of learning runs three steps in sequence:
//   1. IPU: the feedback word (arm used in the previous slot and its reward) updates X, Y, T, n.
//   2. QF: K_MAX reconfigurable regions compute Q(k, n) in parallel for all arms.
//   3. Channel selection: a selector tree picks I(n) = argmax_k Q(k, n).
// During the first K slots (INIT mode) the IPU picks the arm itself and steps 2-3 are bypassed;
// the output multiplexer (the MUX of Fig. 7) forwards either the IPU's INIT pick or the tree's
// result. Regions at or above k_active are forced blank, so k_active and the per-region
// configuration rr_cfg together model the run-time change of K and of the algorithm.
//
// Interface: fb_valid/fb_data is the feedback register written by the processor; sel_valid
// pulses once per slot with sel_idx = I(n) (1-based). alpha, alpha1, alpha2 are UQ5.(WL-5)
// exploration factors (the paper allows 0.5 to 2).
// Timing (K_MAX = 5): INIT pick 2 to 8 clocks after the feedback word; LEARN result 5 clocks
// after it (IPU update 1, QF 1, selector tree 3).
// Lint note: the assertions use rst_n in 'disable iff', which lint reports as a reset used
// both synchronously and asynchronously; they are checks only, not logic.
module mab_core
  import mab_pkg::*;
#(
  parameter int unsigned K_MAX = 5,
  parameter int unsigned WL    = 11,
  parameter int unsigned CNT_W = 16,
  localparam int unsigned IDX_W = $clog2(K_MAX + 1),
  localparam int unsigned F     = WL - INT_BITS,
  localparam int unsigned XW    = CNT_W + F
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [IDX_W-1:0] k_active,
  input  rr_cfg_e          rr_cfg [K_MAX],
  input  logic [WL-1:0]    alpha,
  input  logic [WL-1:0]    alpha1,
  input  logic [WL-1:0]    alpha2,
  input  logic             fb_valid,
  input  logic [FB_W-1:0]  fb_data,
  output logic             sel_valid,
  output logic [IDX_W-1:0] sel_idx,
  output logic [WL-1:0]    sel_q,
  output logic             learn,
  output logic             busy
);

  logic             stat_valid, stat_ready;
  logic [XW-1:0]    x [K_MAX];
  logic [XW-1:0]    y [K_MAX];
  logic [CNT_W-1:0] t [K_MAX];
  logic [CNT_W-1:0] n;
  logic             init_valid;
  logic [IDX_W-1:0] init_idx;
  logic             ipu_busy;

  ipu #(.K_MAX(K_MAX), .WL(WL), .CNT_W(CNT_W)) u_ipu (
    .clk, .rst_n, .k_active, .fb_valid, .fb_data,
    .stat_valid, .stat_ready, .x_o(x), .y_o(y), .t_o(t), .n_o(n),
    .init_sel_valid(init_valid), .init_sel_idx(init_idx), .learn, .busy(ipu_busy));

  logic          rr_in_valid [K_MAX];
  logic          rr_in_ready [K_MAX];
  logic          rr_valid    [K_MAX];
  logic          rr_ready    [K_MAX];
  logic          rr_act      [K_MAX];
  logic [WL-1:0] rr_q        [K_MAX];
  rr_cfg_e       cfg_eff     [K_MAX];
  logic [K_MAX-1:0] rdy_vec;

  for (genvar k = 0; k < K_MAX; k++) begin : g_rr
    assign cfg_eff[k]     = (IDX_W'(k) < k_active) ? rr_cfg[k] : RR_BLANK;
    assign rr_in_valid[k] = stat_valid && (&rdy_vec);
    assign rdy_vec[k]     = rr_in_ready[k];
    qf_rr #(.WL(WL), .CNT_W(CNT_W)) u_rr (
      .clk, .rst_n, .cfg(cfg_eff[k]),
      .in_valid(rr_in_valid[k]), .in_ready(rr_in_ready[k]),
      .x(x[k]), .y(y[k]), .t(t[k]), .n(n), .alpha, .alpha1, .alpha2,
      .out_valid(rr_valid[k]), .out_ready(rr_ready[k]), .act(rr_act[k]), .q(rr_q[k]));
  end
  // broadcast handshake: the statistics move when every region can take them
  assign stat_ready = &rdy_vec;

  logic             cs_valid, cs_act;
  logic [WL-1:0]    cs_q;
  logic [IDX_W-1:0] cs_idx;

  channel_select #(.K_MAX(K_MAX), .WL(WL)) u_cs (
    .clk, .rst_n, .in_valid(rr_valid), .in_ready(rr_ready), .in_act(rr_act), .in_q(rr_q),
    .o_valid(cs_valid), .o_ready(1'b1), .o_act(cs_act), .o_q(cs_q), .o_idx(cs_idx));

  // output multiplexer: INIT pick from the IPU or LEARN pick from the selector tree
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel_valid <= 1'b0;
      sel_idx   <= '0;
      sel_q     <= '0;
    end else begin
      sel_valid <= init_valid || cs_valid;
      if (init_valid) begin
        sel_idx <= init_idx;
        sel_q   <= '0;
      end else if (cs_valid) begin
        sel_idx <= cs_idx;
        sel_q   <= cs_q;
      end
    end
  end

  // busy from the feedback word until the slot's arm is out
  logic in_flight;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) in_flight <= 1'b0;
    else if (fb_valid) in_flight <= 1'b1;
    else if (init_valid || cs_valid) in_flight <= 1'b0;
  end
  assign busy = in_flight || ipu_busy;

  logic unused_ok;
  assign unused_ok = cs_act;

  // the tree only produces a result in LEARN mode, the IPU pick only in INIT mode
  a_one_source: assert property (@(posedge clk) disable iff (!rst_n) !(init_valid && cs_valid));
  a_active_pick: assert property (@(posedge clk) disable iff (!rst_n) cs_valid |-> cs_act);

endmodule
