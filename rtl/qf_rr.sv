// qf_rr: one reconfigurable region (RR) of the QF stage, i.e. the QF calculation of one arm.
//
// In the paper each region is re-loaded by dynamic partial reconfiguration with a blank region
// or with the UCB, UCB_V or UCB_T QF unit (Fig. 7, RR1..RR4). Partial reconfiguration is a
// property of the FPGA fabric, not logic, so this module holds all three units and a
// configuration input cfg that plays the role of the loaded bit-stream: only the selected unit
// receives input beats, and its result is forwarded. A blank region consumes its input and
// reports an inactive arm (act = 0), which the selection tree never picks; that is how the
// number of arms K is reduced at run time. The behaviour follows the paper; the area saving of
// partial reconfiguration is of course not reproduced by this model. cfg must only change while
// the region is idle (between slots).
//
// Interface and timing as the QF units: in_valid/in_ready in, out_valid/out_ready out, one clock.
module qf_rr
  import mab_pkg::*;
#(
  parameter int unsigned WL    = 11,
  parameter int unsigned CNT_W = 16,
  localparam int unsigned F    = WL - INT_BITS,
  localparam int unsigned XW   = CNT_W + F
) (
  input  logic             clk,
  input  logic             rst_n,
  input  rr_cfg_e          cfg,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [XW-1:0]    x,
  input  logic [XW-1:0]    y,
  input  logic [CNT_W-1:0] t,
  input  logic [CNT_W-1:0] n,
  input  logic [WL-1:0]    alpha,
  input  logic [WL-1:0]    alpha1,
  input  logic [WL-1:0]    alpha2,
  output logic             out_valid,
  input  logic             out_ready,
  output logic             act,
  output logic [WL-1:0]    q
);

  logic [2:0]    v_in, r_in, v_out;
  logic [WL-1:0] q_u [3];
  logic [1:0]    sel;
  logic          blank_valid;

  assign sel = 2'(cfg) - 2'd1;
  always_comb begin
    for (int i = 0; i < 3; i++) v_in[i] = in_valid && (cfg != RR_BLANK) && (sel == 2'(i));
  end

  qf_ucb #(.WL(WL), .CNT_W(CNT_W)) u_ucb (
    .clk, .rst_n, .in_valid(v_in[0]), .in_ready(r_in[0]), .x, .y, .t, .n,
    .alpha(alpha), .alpha2(alpha2), .out_valid(v_out[0]),
    .out_ready(out_ready && sel == 2'd0), .q(q_u[0]));
  qf_ucbv #(.WL(WL), .CNT_W(CNT_W)) u_ucbv (
    .clk, .rst_n, .in_valid(v_in[1]), .in_ready(r_in[1]), .x, .y, .t, .n,
    .alpha(alpha1), .alpha2(alpha2), .out_valid(v_out[1]),
    .out_ready(out_ready && sel == 2'd1), .q(q_u[1]));
  qf_ucbt #(.WL(WL), .CNT_W(CNT_W)) u_ucbt (
    .clk, .rst_n, .in_valid(v_in[2]), .in_ready(r_in[2]), .x, .y, .t, .n,
    .alpha(alpha), .alpha2(alpha2), .out_valid(v_out[2]),
    .out_ready(out_ready && sel == 2'd2), .q(q_u[2]));

  // blank region: a one-deep register that answers "inactive"
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) blank_valid <= 1'b0;
    else if (cfg == RR_BLANK && (!blank_valid || out_ready)) blank_valid <= in_valid;
  end

  always_comb begin
    if (cfg == RR_BLANK) begin
      in_ready  = !blank_valid || out_ready;
      out_valid = blank_valid;
      act       = 1'b0;
      q         = '0;
    end else begin
      in_ready  = r_in[sel];
      out_valid = v_out[sel];
      act       = 1'b1;
      q         = q_u[sel];
    end
  end

endmodule
