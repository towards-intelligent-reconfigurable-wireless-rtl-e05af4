// tb_resource_mapper: self-checking test of resource mapping (Fig. 6 of the paper).
//
// Sends frames of 48 random data symbols (random input gaps) and collects 64 output bins per
// frame (random out_ack). The expected frame is built here from the subcarrier plan: data
// symbol d goes to logical subcarrier k, taking k = -26..26 in increasing order and skipping
// 0 and the pilots +-7, +-21; bin = k mod 64; pilots +1 at -21, -7, +7 and -1 at +21; DC and
// the guard bins 27..37 are zero. out_last must mark bin 63 only.
module tb_resource_mapper;
  import phy_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_stb, in_ack, out_stb, out_ack, out_last;
  cplx_t in_sym, out_sym;

  resource_mapper dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  cplx_t exp_bins [64];
  int ob;

  always @(posedge clk) if (rst_n && out_stb && out_ack) begin
    check(out_sym == exp_bins[ob], $sformatf("bin %0d: got %h expected %h", ob, out_sym, exp_bins[ob]));
    check(out_last == (ob == 63), "out_last on bin 63");
    ob = (ob + 1) % 64;
  end

  initial begin
    int d, k;
    in_stb = 0; out_ack = 0; in_sym = '0; ob = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int fr = 0; fr < 40; fr++) begin
      for (int i = 0; i < 64; i++) exp_bins[i] = '0;
      exp_bins[43] = '{16'sh7FFF, 16'sh0}; exp_bins[57] = '{16'sh7FFF, 16'sh0};
      exp_bins[7]  = '{16'sh7FFF, 16'sh0}; exp_bins[21] = '{16'sh8001, 16'sh0};
      d = 0;
      for (k = -26; k <= 26; k++) begin
        if (k == 0 || k == 7 || k == -7 || k == 21 || k == -21) continue;
        in_sym.re = 16'($urandom()); in_sym.im = 16'($urandom());
        exp_bins[(k + 64) % 64] = in_sym;
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) @(negedge clk);
        in_stb = 1'b1;
        out_ack = ($urandom_range(0, 3) != 0);
        @(posedge clk);
        while (!in_ack) @(posedge clk);
        @(negedge clk);
        in_stb = 1'b0;
        d++;
      end
      check(d == 48, "48 data symbols per frame");
      // drain the frame
      for (int c = 0; c < 400 && !(ob == 0 && !out_stb); c++) begin
        out_ack = ($urandom_range(0, 3) != 0);
        @(negedge clk);
      end
      check(ob == 0, "64 bins emitted");
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
