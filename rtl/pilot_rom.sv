// pilot_rom: the four BPSK pilot symbols (Sec. IV-B of the paper: "pilot signals are
// pre-generated and stored in block memory", +1 = 0x7FFF, -1 = 0x8001).
//
// Pilot p sits in IFFT bin 7, 21, 43, 57 for p = 0..3 (Fig. 6). The signs are those of IEEE
// 802.11a for sub-carriers +7, +21, -21, -7: +1, -1, +1, +1 (the paper does not print them).
// The imaginary part is 0. Combinational read, used by the resource mapper and by the channel
// estimator (transmitted pilot power).
module pilot_rom
  import phy_pkg::*;
(
  input  logic [1:0] addr,
  output cplx_t      pilot
);

  always_comb begin
    pilot.im = '0;
    case (addr)
      2'd1:    pilot.re = PILOT_N;
      default: pilot.re = PILOT_P;
    endcase
  end

endmodule
