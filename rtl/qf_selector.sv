// qf_selector: one node of the channel-selection tree (Fig. 5 of the paper).
//
// Takes two AXI4-Stream-like beats, each carrying a quality factor Q, an arm index and an
// "active" flag (arm present in the current configuration), and emits the larger one. The
// comparison is Q(i) >= Q(j) as printed in Fig. 5; input a must carry the lower arm indices,
// so on a tie the lower index wins, as the paper states for equal QF values (Sec. VI-A). An
// inactive arm always loses to an active one. The "AXI extractor" of the figure is the join of
// the two input handshakes and the "AXI creator" is the output register.
//
// Timing: the node fires when both inputs are valid and its output register is free or being
// read; latency one clock.
module qf_selector #(
  parameter int unsigned WL    = 11,
  parameter int unsigned IDX_W = 3
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             a_valid,
  output logic             a_ready,
  input  logic             a_act,
  input  logic [WL-1:0]    a_q,
  input  logic [IDX_W-1:0] a_idx,
  input  logic             b_valid,
  output logic             b_ready,
  input  logic             b_act,
  input  logic [WL-1:0]    b_q,
  input  logic [IDX_W-1:0] b_idx,
  output logic             o_valid,
  input  logic             o_ready,
  output logic             o_act,
  output logic [WL-1:0]    o_q,
  output logic [IDX_W-1:0] o_idx
);

  logic fire, free, pick_a;
  assign free    = !o_valid || o_ready;
  assign fire    = a_valid && b_valid && free;
  assign a_ready = fire;
  assign b_ready = fire;
  // {act, Q} compared as one number: any active arm beats an inactive one
  assign pick_a  = {a_act, a_q} >= {b_act, b_q};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_valid <= 1'b0;
      o_act   <= 1'b0;
      o_q     <= '0;
      o_idx   <= '0;
    end else if (free) begin
      o_valid <= a_valid && b_valid;
      if (a_valid && b_valid) begin
        o_act <= pick_a ? a_act : b_act;
        o_q   <= pick_a ? a_q   : b_q;
        o_idx <= pick_a ? a_idx : b_idx;
      end
    end
  end

endmodule
