// vcc_coset_rom: the optional ROM of pre-generated coset kernels.
//
// Holds R random M-bit kernels. All of them are presented at once because
// the encoder evaluates every kernel in parallel; the decoder picks the one
// named by the stored index. The first four entries are the four example
// kernels of the VCC worked example; the remaining entries are filled by a
// 16-bit Galois LFSR (feedback 0xB400, seed 0xACE1), advanced seven steps per
// entry. Both the fill rule and the use of the ROM for SLC mode are choices
// of this design; a real part would store kernels drawn from a true random
// source. Pure constant logic, no clock.
module vcc_coset_rom
  import vcc_pkg::*;
#(
  parameter int unsigned R = R_KERN
) (
  output kernel_t kernels_o [R]
);

  typedef kernel_t rom_t [R];

  function automatic rom_t rom_init();
    rom_t        rom;
    logic [15:0] lfsr;
    lfsr = 16'hACE1;
    for (int i = 0; i < int'(R); i++) begin
      for (int s = 0; s < 7; s++)
        lfsr = lfsr[0] ? ((lfsr >> 1) ^ 16'hB400) : (lfsr >> 1);
      rom[i] = kernel_t'(lfsr);
    end
    if (R > 0) rom[0] = kernel_t'(16'b1010100111011011);
    if (R > 1) rom[1] = kernel_t'(16'b0100011111110100);
    if (R > 2) rom[2] = kernel_t'(16'b0011001001100011);
    if (R > 3) rom[3] = kernel_t'(16'b1010110001000111);
    return rom;
  endfunction

  localparam rom_t ROM = rom_init();

  assign kernels_o = ROM;

endmodule
