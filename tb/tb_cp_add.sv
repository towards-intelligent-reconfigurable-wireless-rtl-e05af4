// tb_cp_add: self-checking test of cyclic-prefix addition.
// Sends symbols of 64 random samples (random input gaps) and checks the 80 output samples
// (random out_ack back-pressure): the last 16 input samples first, then all 64 in order.
module tb_cp_add;
  import phy_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_stb, in_ack, out_stb, out_ack;
  cplx_t in_data, out_data;

  cp_add dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  cplx_t sym [64];
  int oc;
  always @(posedge clk) if (rst_n && out_stb && out_ack) begin
    cplx_t e;
    e = (oc < 16) ? sym[48 + oc] : sym[oc - 16];
    check(out_data == e, $sformatf("output sample %0d: %h expected %h", oc, out_data, e));
    oc++;
  end

  initial begin
    in_stb = 0; out_ack = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < 50; s++) begin
      oc = 0;
      for (int i = 0; i < 64; i++) begin
        sym[i].re = 16'($urandom()); sym[i].im = 16'($urandom());
      end
      for (int i = 0; i < 64; i++) begin
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) @(negedge clk);
        in_data = sym[i];
        in_stb = 1'b1;
        @(posedge clk);
        while (!in_ack) @(posedge clk);
        @(negedge clk);
        in_stb = 1'b0;
      end
      for (int c = 0; c < 500 && oc < 80; c++) begin
        out_ack = ($urandom_range(0, 2) != 0);
        @(negedge clk);
      end
      out_ack = 1'b0;
      check(oc == 80, $sformatf("symbol %0d: %0d output samples", s, oc));
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
