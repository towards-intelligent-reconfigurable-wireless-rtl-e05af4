// tb_channel_select: self-checking test of the channel-selection tree for K_MAX arms.
//
// Each round presents K_MAX random (act, Q) values (about one in five arms inactive, ties
// forced now and then) with random per-arm valid skew, and checks the tree's output
// against the reference: the active arm with the largest Q, lowest index on ties, reported
// with its 1-based index. Random output back-pressure. Rounds with no active arm are skipped.
module tb_channel_select;
  localparam int K_MAX = 5, WL = 11, IDX_W = $clog2(K_MAX + 1);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid [K_MAX];
  logic in_ready [K_MAX];
  logic in_act [K_MAX];
  logic [WL-1:0] in_q [K_MAX];
  logic o_valid, o_ready, o_act;
  logic [WL-1:0] o_q;
  logic [IDX_W-1:0] o_idx;

  channel_select dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  initial begin
    int best;
    bit any, done_k [K_MAX];
    o_ready = 0;
    for (int k = 0; k < K_MAX; k++) begin in_valid[k] = 0; in_act[k] = 0; in_q[k] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 3000; round++) begin
      @(negedge clk);
      any = 0;
      best = -1;
      for (int k = 0; k < K_MAX; k++) begin
        in_act[k] = ($urandom_range(0, 4) != 0);
        in_q[k] = ($urandom_range(0, 3) == 0 && k > 0) ? in_q[k-1] : WL'($urandom());
        done_k[k] = 0;
      end
      for (int k = 0; k < K_MAX; k++)
        if (in_act[k] && (best < 0 || in_q[k] > in_q[best])) best = k;
      // present the values with random skew, hold each until accepted
      begin
        int guard;
        bit all;
        guard = 0;
        all = 0;
        while (!all && guard < 100) begin
          for (int k = 0; k < K_MAX; k++) in_valid[k] = !done_k[k] && (in_valid[k] || $urandom_range(0, 1));
          o_ready = ($urandom_range(0, 2) != 0);
          @(posedge clk);
          all = 1;
          for (int k = 0; k < K_MAX; k++) begin
            if (in_valid[k] && in_ready[k]) done_k[k] = 1;
            all &= done_k[k];
          end
          @(negedge clk);
          for (int k = 0; k < K_MAX; k++) if (done_k[k]) in_valid[k] = 0;
          guard++;
        end
        check(all, "all arms accepted");
      end
      begin
        int guard;
        guard = 0;
        o_ready = ($urandom_range(0, 1) == 1);
        while (!(o_valid && o_ready) && guard < 50) begin
          @(negedge clk);
          o_ready = ($urandom_range(0, 1) == 1);
          guard++;
        end
        check(guard < 50, "tree produced a result");
        if (best >= 0)
          check(o_act && int'(o_idx) == best + 1 && o_q == in_q[best],
                $sformatf("round %0d: idx %0d q %0d, expected idx %0d q %0d", round, o_idx, o_q,
                          best + 1, in_q[best]));
        else
          check(!o_act, "no active arm reported as inactive");
        @(posedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
