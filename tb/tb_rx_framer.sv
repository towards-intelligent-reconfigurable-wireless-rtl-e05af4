// tb_rx_framer: self-checking test of receiver framing and cyclic-prefix removal.
//
// Each frame is 20 idle samples, 320 preamble samples and 80 payload samples; every sample
// carries its frame position in the real part so that the forwarded samples can be
// identified. The detector pulse is placed at a random frame position D = 30..46. With the
// design's DET_POS = 46 the framer numbers samples as if detection happened at 46, so every
// FFT window must start (46 - D) samples early: the expected windows are the long training
// symbols 192..255, 256..319 and the payload body 336..399, each shifted by -(46 - D), with
// fft_last on the 64th sample. Also checks in_frame, done, and that clear restarts the search.
module tb_rx_framer;
  import phy_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clear, in_stb, in_det, fft_stb, fft_last, in_frame, done;
  cplx_t in_data, fft_data;

  rx_framer dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  int exp_idx [$];
  int nout;
  always @(posedge clk) if (rst_n && fft_stb) begin
    int e;
    e = (exp_idx.size() > 0) ? exp_idx.pop_front() : -1;
    check(int'($signed(fft_data.re)) == e, $sformatf("forwarded sample %0d expected %0d",
                                                      $signed(fft_data.re), e));
    nout++;
    check(fft_last == (nout % 64 == 0), $sformatf("fft_last at output %0d", nout));
  end

  initial begin
    int d, off;
    clear = 0; in_stb = 0; in_det = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < 40; f++) begin
      @(negedge clk);
      clear = 1;
      @(negedge clk);
      clear = 0;
      d = $urandom_range(30, 46);
      off = 46 - d;
      nout = 0;
      for (int i = 192; i < 320; i++) exp_idx.push_back(i - off);
      for (int i = 336; i < 400; i++) exp_idx.push_back(i - off);
      for (int t = -20; t < 400; t++) begin
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) @(negedge clk);
        in_data.re = 16'(t); in_data.im = 16'($urandom());
        in_det = (t == d) || (t > d && $urandom_range(0, 50) == 0);
        in_stb = 1;
        @(negedge clk);
        in_stb = 0; in_det = 0;
        if (t == 100) check(in_frame && !done, "in_frame during the preamble");
      end
      repeat (3) @(negedge clk);
      check(nout == 192, $sformatf("frame %0d (D=%0d): %0d samples forwarded", f, d, nout));
      check(done && !in_frame, "done after the payload");
      exp_idx.delete();
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
