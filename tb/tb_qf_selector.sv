// tb_qf_selector: self-checking test of one comparator node of the selection tree.
//
// Streams random (act, Q, index) pairs into both inputs with random valid gaps and random
// output back-pressure. The reference: an active arm always beats an inactive one; between
// two of the same kind the larger Q wins, and on a tie input a (the lower arm index) wins.
// Checks every output beat against a queue of expected results, and that nothing is lost or
// duplicated.
module tb_qf_selector;
  localparam int WL = 11, IDX_W = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic a_valid, a_ready, a_act, b_valid, b_ready, b_act, o_valid, o_ready, o_act;
  logic [WL-1:0] a_q, b_q, o_q;
  logic [IDX_W-1:0] a_idx, b_idx, o_idx;

  qf_selector dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  typedef struct packed { logic act; logic [WL-1:0] q; logic [IDX_W-1:0] idx; } beat_t;
  beat_t exp_q [$];
  int sent = 0, got = 0;
  localparam int N = 4000;

  // output side: random ready, compare
  always @(posedge clk) if (rst_n) begin
    if (o_valid && o_ready) begin
      beat_t e;
      got++;
      if (exp_q.size() == 0) check(1'b0, "output without input");
      else begin
        e = exp_q.pop_front();
        check(o_act == e.act && o_q == e.q && o_idx == e.idx,
              $sformatf("got act=%0d q=%0d idx=%0d expected act=%0d q=%0d idx=%0d",
                        o_act, o_q, o_idx, e.act, e.q, e.idx));
      end
    end
  end

  initial begin
    a_valid = 0; b_valid = 0; o_ready = 0; a_act = 0; b_act = 0; a_q = 0; b_q = 0;
    a_idx = 3'd1; b_idx = 3'd2;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    while (sent < N) begin
      @(negedge clk);
      o_ready = ($urandom_range(0, 3) != 0);
      if (!a_valid || a_ready) begin end
      a_valid = 1'b1; b_valid = ($urandom_range(0, 4) != 0);
      a_act = ($urandom_range(0, 4) != 0);
      b_act = ($urandom_range(0, 4) != 0);
      a_q = WL'($urandom());
      b_q = ($urandom_range(0, 5) == 0) ? a_q : WL'($urandom());
      if ($urandom_range(0, 9) == 0) a_q = '1;
      a_idx = IDX_W'($urandom_range(1, 3));
      b_idx = IDX_W'($urandom_range(4, 7));
      @(posedge clk);
      if (a_valid && b_valid && a_ready) begin
        beat_t e;
        check(b_ready, "both inputs accepted together");
        if (a_act != b_act) e = a_act ? '{a_act, a_q, a_idx} : '{b_act, b_q, b_idx};
        else e = (a_q >= b_q) ? '{a_act, a_q, a_idx} : '{b_act, b_q, b_idx};
        exp_q.push_back(e);
        sent++;
      end else begin
        check(!(a_ready && !b_valid), "no accept with one input missing");
      end
    end
    @(negedge clk);
    a_valid = 0; b_valid = 0; o_ready = 1;
    repeat (5) @(posedge clk);
    check(got == sent && exp_q.size() == 0, $sformatf("sent %0d got %0d", sent, got));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
