// tb_pilot_rom: self-checking test of the pilot ROM.
// Checks the four pilot values (802.11a order of the data-symbol pilots at subcarriers
// -21, -7, +7, +21 read as ROM addresses 0..3 = pbin 43, 57, 7, 21 -> +1, +1, +1, -1; the
// ROM address mapping is phy_pkg::bin_pilot) and that all are real-valued with full scale.
module tb_pilot_rom;
  import phy_pkg::*;
  logic [1:0] addr;
  cplx_t pilot;
  pilot_rom dut (.*);
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask
  initial begin
    int pbin [4] = '{7, 21, 43, 57};
    int sgn  [4] = '{1, -1, 1, 1};
    for (int i = 0; i < 4; i++) begin
      addr = bin_pilot(6'(pbin[i]));
      #1;
      check(int'($signed(pilot.re)) == sgn[i] * 32767 && pilot.im == 0,
            $sformatf("pilot at bin %0d = %0d", pbin[i], $signed(pilot.re)));
    end
    for (int a = 0; a < 4; a++) begin
      addr = 2'(a);
      #1;
      check(pilot.im == 0 && (pilot.re == 16'h7FFF || pilot.re == 16'h8001), "pilot is +-1");
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
