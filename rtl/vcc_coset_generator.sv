// vcc_coset_generator: builds the R coset kernels of one 64-bit word from the
// word itself (Base Coset Vector Generator).
//
// The 32 left digits of the word's MLC symbols, taken leftmost symbol first,
// form L, which is cut into b = 32/M = 2 base vectors of M = 16 bits. Each of
// the R/b = 8 masks M_i = i, held in 1 + log2(R/b) = 4 bits (the extra zero
// bit keeps a kernel and its complement from both appearing), is repeated
// across a base vector and XORed with it:
//     R_(i*b + j) = base_j ^ {M_i, M_i, M_i, M_i}.
// Because the encoder never changes left digits, the same kernels are
// rebuilt from the stored word on a read, so no kernel is ever stored and the
// kernels differ for every write. Kernel numbering follows the generator
// algorithm's index i*b + j. Combinational.
module vcc_coset_generator
  import vcc_pkg::*;
#(
  parameter int unsigned R = R_KERN
) (
  input  logic [N_BITS-1:0] word_i,
  output kernel_t           kernels_o [R]
);

  localparam int unsigned L_BITS = N_BITS / 2;        // left digits (l)
  localparam int unsigned B      = L_BITS / M_BITS;   // base vectors (b)
  localparam int unsigned PER_B  = R / B;             // kernels per base (r/b)
  localparam int unsigned MASK_W = 1 + $clog2(PER_B); // mask width

  initial begin
    assert (R % B == 0 && M_BITS % MASK_W == 0)
      else $error("vcc_coset_generator: R=%0d does not fit the mask scheme", R);
  end

  logic [L_BITS-1:0] left;   // left[L_BITS-1] is the leftmost symbol's digit

  always_comb begin
    for (int s = 0; s < int'(L_BITS); s++)
      left[L_BITS-1-s] = word_i[N_BITS-1-2*s];
    for (int i = 0; i < int'(PER_B); i++) begin
      kernel_t rep;
      for (int t = 0; t < int'(M_BITS / MASK_W); t++)
        rep[t*MASK_W +: MASK_W] = MASK_W'(i);
      for (int j = 0; j < int'(B); j++)
        kernels_o[i*B + j] = left[L_BITS-1-j*M_BITS -: M_BITS] ^ rep;
    end
  end

endmodule
