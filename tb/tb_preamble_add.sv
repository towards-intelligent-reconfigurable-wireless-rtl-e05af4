// tb_preamble_add: self-checking test of preamble addition.
//
// The expected preamble is computed here from the IEEE 802.11a definitions (12 short-training
// subcarriers scaled by sqrt(13/6), 52 long-training subcarriers, 64-point inverse DFT with
// 1/64 scaling, 10 short periods of 16, a 32-sample long-symbol prefix, two long symbols) and
// compared with the 320 output samples within 2 LSB. Then NSYM*80 random payload samples are
// offered (random gaps) and must appear unchanged, after which busy must drop and in_ack stay
// low. Repeated for several slots.
module tb_preamble_add;
  import phy_pkg::*;
  localparam real PI = 3.14159265358979;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start, in_stb, in_ack, out_stb, busy;
  cplx_t in_data, out_data;

  preamble_add dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  real pre_re [320], pre_im [320];
  int s_re [53] = '{0,0,1,0,0,0,-1,0,0,0,1,0,0,0,-1,0,0,0,-1,0,0,0,1,0,0,0,0,0,0,0,-1,0,0,0,-1,0,0,0,1,0,0,0,1,0,0,0,1,0,0,0,1,0,0};
  int l_v  [53] = '{1,1,-1,-1,1,1,-1,1,-1,1,1,1,1,1,1,-1,-1,1,1,-1,1,-1,1,1,1,1,0,1,-1,-1,1,1,-1,1,-1,1,-1,-1,-1,-1,-1,1,1,-1,-1,1,-1,1,-1,1,1,1,1};

  task automatic build();
    real sr [64], si [64], lr [64], li [64], g;
    g = $sqrt(13.0 / 6.0);
    for (int t = 0; t < 64; t++) begin
      sr[t] = 0; si[t] = 0; lr[t] = 0; li[t] = 0;
      for (int k = -26; k <= 26; k++) begin
        real c, s;
        c = $cos(2.0 * PI * k * t / 64.0);
        s = $sin(2.0 * PI * k * t / 64.0);
        // short: value s_re*(1+j)*g
        sr[t] += g * s_re[k + 26] * (c - s) / 64.0;
        si[t] += g * s_re[k + 26] * (c + s) / 64.0;
        lr[t] += l_v[k + 26] * c / 64.0;
        li[t] += l_v[k + 26] * s / 64.0;
      end
    end
    for (int t = 0; t < 160; t++) begin pre_re[t] = sr[t % 64]; pre_im[t] = si[t % 64]; end
    for (int t = 0; t < 32; t++) begin pre_re[160 + t] = lr[32 + t]; pre_im[160 + t] = li[32 + t]; end
    for (int t = 0; t < 128; t++) begin pre_re[192 + t] = lr[t % 64]; pre_im[192 + t] = li[t % 64]; end
  endtask

  function automatic bit near(input logic [15:0] v, input real r);
    int e;
    e = int'($signed(v)) - $rtoi(r * 32768.0);
    return e >= -2 && e <= 2;
  endfunction

  cplx_t pay [$];
  int oc;
  always @(posedge clk) if (rst_n && out_stb) begin
    if (oc < 320)
      check(near(out_data.re, pre_re[oc]) && near(out_data.im, pre_im[oc]),
            $sformatf("preamble sample %0d: %0d/%0d expected %f/%f", oc, $signed(out_data.re),
                       $signed(out_data.im), pre_re[oc] * 32768.0, pre_im[oc] * 32768.0));
    else if (pay.size() == 0) check(1'b0, "extra output sample");
    else check(out_data == pay.pop_front(), $sformatf("payload sample %0d", oc - 320));
    oc++;
  end

  initial begin
    build();
    start = 0; in_stb = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int slot = 0; slot < 5; slot++) begin
      oc = 0;
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      check(busy, "busy after start");
      for (int i = 0; i < 80; i++) begin
        in_data.re = 16'($urandom()); in_data.im = 16'($urandom());
        in_stb = 1'b1;
        @(posedge clk);
        while (!in_ack) @(posedge clk);
        pay.push_back(in_data);
        @(negedge clk);
        in_stb = 1'b0;
        while ($urandom_range(0, 2) == 0) @(negedge clk);
      end
      repeat (3) @(negedge clk);
      check(oc == 400, $sformatf("slot %0d: %0d samples", slot, oc));
      check(!busy && !in_ack, "idle after the frame");
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
