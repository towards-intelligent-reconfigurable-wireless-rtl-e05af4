// tb_qam_demapper: self-checking test of the hard-decision data demodulator.
//
// For both modulations and random bit patterns, builds the ideal constellation point from the
// paper's Table I values, adds a random perturbation smaller than half the distance to the
// nearest decision boundary (up to +-0.14 for 16-QAM, +-0.6 for QPSK) and checks that the
// registered output (one-cycle latency) returns the original bits (QPSK: upper two bits 0).
module tb_qam_demapper;
  import phy_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  mod_e mod;
  logic in_stb, out_stb;
  cplx_t sym;
  logic [3:0] bits;

  qam_demapper dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  function automatic real lvl(input logic hi, input logic lo);
    case ({hi, lo})
      2'b00: return -0.9485;
      2'b01: return 0.3162;
      2'b10: return -0.3162;
      default: return 0.9485;
    endcase
  endfunction

  function automatic logic [15:0] q15(input real v);
    if (v > 0.99997) v = 0.99997;
    if (v < -1.0) v = -1.0;
    return 16'($rtoi(v * 32768.0));
  endfunction

  initial begin
    logic [3:0] b;
    real er, ei, d;
    in_stb = 0; mod = MOD_QPSK; sym = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      mod = mod_e'(it % 2);
      b = 4'($urandom());
      d = (mod == MOD_QPSK) ? 0.6 : 0.14;
      if (mod == MOD_QPSK) begin
        b[3:2] = 2'b00;
        er = b[0] ? 0.7071 : -0.7071;
        ei = b[1] ? 0.7071 : -0.7071;
      end else begin
        er = lvl(b[0], b[1]);
        ei = lvl(b[2], b[3]);
      end
      er += d * (real'($urandom_range(0, 2000)) / 1000.0 - 1.0);
      ei += d * (real'($urandom_range(0, 2000)) / 1000.0 - 1.0);
      sym.re = q15(er); sym.im = q15(ei);
      in_stb = 1'b1;
      @(negedge clk);
      in_stb = 1'b0;
      check(out_stb, "one-cycle latency");
      check(bits == b, $sformatf("mod %0d: bits %b expected %b", mod, bits, b));
    end
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
