// tb_qam_mapper: self-checking test of the data modulator.
//
// Exhaustive over the 16 bit patterns and both modulations. The expected symbols are written
// here from the paper's Table I values (QPSK +-0.7071; 16-QAM +-0.3162, +-0.9485) converted to
// Q1.15; the table gives four digits, so values must agree within 0.0006 (20 LSB). Bit order: QPSK I = b0, Q = b1; 16-QAM
// I = (b0 b1), Q = (b2 b3) with 00 -> -0.9485, 01 -> 0.3162, 10 -> -0.3162, 11 -> 0.9485.
// Also checks the pass-through strobe/acknowledge and that unused bits do not matter in QPSK.
module tb_qam_mapper;
  import phy_pkg::*;
  mod_e mod;
  logic in_stb, in_ack, out_stb, out_ack;
  logic [3:0] bits;
  cplx_t sym;

  qam_mapper dut (.*);

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

  function automatic bit near(input logic [15:0] v, input real r);
    int e;
    e = int'($signed(v)) - $rtoi(r * 32768.0 + (r >= 0.0 ? 0.5 : -0.5));
    return e >= -20 && e <= 20;
  endfunction

  initial begin
    real er, ei;
    for (int m = 0; m < 2; m++) for (int b = 0; b < 16; b++) begin
      mod = mod_e'(m);
      bits = 4'(b);
      in_stb = b[0]; out_ack = b[1];
      #1;
      if (m == 0) begin
        er = bits[0] ? 0.7071 : -0.7071;
        ei = bits[1] ? 0.7071 : -0.7071;
      end else begin
        er = lvl(bits[0], bits[1]);
        ei = lvl(bits[2], bits[3]);
      end
      check(near(sym.re, er) && near(sym.im, ei),
            $sformatf("mod %0d bits %b: got %0d/%0d", m, bits, $signed(sym.re), $signed(sym.im)));
      check(out_stb == in_stb && in_ack == out_ack, "handshake passes through");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
