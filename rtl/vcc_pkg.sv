// vcc_pkg: constants, types and functions shared by the Virtual Coset
// Coding (VCC) blocks.
//
// A 64-bit word D is split into P = N_BITS/M_BITS = 4 partitions of 16 bits.
// Each of R_KERN = 16 kernels, applied as-is or inverted per partition, gives
// 2^P = 16 virtual cosets, 256 in all, named by an 8-bit index
// opt = {kernel[3:0], flag0, flag1, flag2, flag3}. These sizes are the
// configuration VCC(64,256,16) that the design is evaluated in.
//
// Bit order follows the way blocks are printed MSB first: partition d0 is
// D[63:48], and symbol k (k = 0 is the leftmost) of an MLC word is
// D[63-2k:62-2k], whose left (more significant) digit is D[63-2k].
//
// Cost model. In SLC mode every changed bit costs one unit. In MLC mode a
// changed two-bit symbol costs E_HIGH when the new symbol's right digit is 1
// (programming to an intermediate level) and E_LOW otherwise, an unchanged
// symbol costs nothing; this is the high/low split of the MLC symbol
// transition table. The two energy weights are this design's choice; only
// their ratio (about ten) is suggested by the device data. A stuck-at-wrong
// (SAW) cell is a stuck cell whose new value differs from its stored value.
// The cost is one scalar: the primary objective (SAW count or energy) shifted
// left by COST_SHIFT plus the secondary one, so minimising it minimises the
// primary objective first.
package vcc_pkg;

  parameter int unsigned N_BITS     = 64;   // encoded word (n)
  parameter int unsigned M_BITS     = 16;   // kernel and partition width (m)
  parameter int unsigned P_PARTS    = N_BITS / M_BITS;  // partitions (p)
  parameter int unsigned R_KERN     = 16;   // kernels (r)
  parameter int unsigned N_COSETS   = R_KERN * (1 << P_PARTS);  // virtual cosets (N)
  parameter int unsigned AUX_BITS   = $clog2(N_COSETS);          // log2 N = 8
  parameter int unsigned LINE_BITS  = 512;  // cache line
  parameter int unsigned WORDS      = LINE_BITS / N_BITS;        // 8 words per line
  parameter int unsigned PAD_BITS   = 128;  // one AES block
  parameter int unsigned N_ENGINES  = LINE_BITS / PAD_BITS;      // 4 AES engines

  // MLC symbol transition energy, arbitrary units.
  parameter int unsigned E_HIGH     = 10;
  parameter int unsigned E_LOW      = 1;

  // Width of the primary/secondary fields of the scalar cost.
  parameter int unsigned COST_SHIFT = 10;
  parameter int unsigned COST_W     = 20;
  typedef logic [COST_W-1:0] cost_t;

  typedef logic [M_BITS-1:0] kernel_t;

  // Kernel as it is applied to a partition: all bits in SLC mode, only the
  // right-digit positions in MLC mode (left digits are never changed, so they
  // stay available to regenerate the kernels at decode time).
  function automatic kernel_t effective_kernel(input kernel_t k, input logic mlc);
    return mlc ? (k & kernel_t'({(M_BITS/2){2'b01}})) : k;
  endfunction

endpackage
