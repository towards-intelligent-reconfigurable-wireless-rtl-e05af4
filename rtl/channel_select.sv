// channel_select: arg-max over the K_MAX quality factors (Eq. 5), built as a binary tree of
// qf_selector nodes (Fig. 5 shows the tree for K = 4).
//
// The number of leaves is K_MAX rounded up to a power of two; leaves without an arm are tied to
// an always-valid inactive entry. Leaf k carries arm index k+1 (1-based, as in the feedback
// word). Because the lower-indexed subtree always enters a node on its "a" side, ties resolve
// to the lowest arm index.
//
// Interface: per arm in_valid/in_ready/in_act/in_q; one output beat with the winning index and
// its Q. Latency: log2(leaves) clocks (3 for K_MAX = 5, padded to 8 leaves), one result per clock.
module channel_select #(
  parameter int unsigned K_MAX = 5,
  parameter int unsigned WL    = 11,
  localparam int unsigned IDX_W = $clog2(K_MAX + 1),
  localparam int unsigned LVL   = (K_MAX > 1) ? $clog2(K_MAX) : 1,
  localparam int unsigned LEAVES = 1 << LVL
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid [K_MAX],
  output logic             in_ready [K_MAX],
  input  logic             in_act   [K_MAX],
  input  logic [WL-1:0]    in_q     [K_MAX],
  output logic             o_valid,
  input  logic             o_ready,
  output logic             o_act,
  output logic [WL-1:0]    o_q,
  output logic [IDX_W-1:0] o_idx
);

  // heap numbering: node 1 is the root, node i has children 2i and 2i+1, leaves LEAVES..2*LEAVES-1
  logic             nv [2*LEAVES];
  logic             nr [2*LEAVES];
  logic             na [2*LEAVES];
  logic [WL-1:0]    nq [2*LEAVES];
  logic [IDX_W-1:0] ni [2*LEAVES];

  assign nv[0] = 1'b0;
  assign na[0] = 1'b0;
  assign nq[0] = '0;
  assign ni[0] = '0;

  for (genvar l = 0; l < LEAVES; l++) begin : g_leaf
    if (l < K_MAX) begin : g_arm
      assign nv[LEAVES+l] = in_valid[l];
      assign na[LEAVES+l] = in_act[l];
      assign nq[LEAVES+l] = in_q[l];
      assign ni[LEAVES+l] = IDX_W'(l + 1);
      assign in_ready[l]  = nr[LEAVES+l];
    end else begin : g_pad
      assign nv[LEAVES+l] = 1'b1;
      assign na[LEAVES+l] = 1'b0;
      assign nq[LEAVES+l] = '0;
      assign ni[LEAVES+l] = '0;
    end
  end

  for (genvar i = 1; i < LEAVES; i++) begin : g_node
    qf_selector #(.WL(WL), .IDX_W(IDX_W)) u_sel (
      .clk, .rst_n,
      .a_valid(nv[2*i]),   .a_ready(nr[2*i]),   .a_act(na[2*i]),   .a_q(nq[2*i]),   .a_idx(ni[2*i]),
      .b_valid(nv[2*i+1]), .b_ready(nr[2*i+1]), .b_act(na[2*i+1]), .b_q(nq[2*i+1]), .b_idx(ni[2*i+1]),
      .o_valid(nv[i]),     .o_ready(nr[i]),     .o_act(na[i]),     .o_q(nq[i]),     .o_idx(ni[i]));
  end

  assign o_valid = nv[1];
  assign nr[1]   = o_ready;
  assign nr[0]   = 1'b0;
  assign o_act   = na[1];
  assign o_q     = nq[1];
  assign o_idx   = ni[1];

  logic unused_ok;
  assign unused_ok = ^{nr[0]};

endmodule
