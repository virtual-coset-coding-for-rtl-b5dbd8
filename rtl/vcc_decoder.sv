// vcc_decoder: inverse of vcc_encoder for one 64-bit word.
//
// The stored index opt = {i', flag0..flag(p-1)} selects kernel R_i'; each
// 16-bit partition Y_j of the stored code word is XORed with R_i' when
// flag_j is 0 and with its complement when flag_j is 1, which returns the
// encrypted word D. In MLC mode only right-digit positions of the kernel are
// applied, matching the encoder. Purely combinational: one row of XOR gates
// behind a kernel multiplexer.
module vcc_decoder
  import vcc_pkg::*;
#(
  parameter int unsigned R  = R_KERN,
  localparam int unsigned IW = (R > 1) ? $clog2(R) : 1,
  localparam int unsigned AW = IW + P_PARTS
) (
  input  logic [N_BITS-1:0] code_i,     // stored X_opt
  input  logic [AW-1:0]     aux_i,      // stored opt
  input  kernel_t           kernels_i [R],
  input  logic              mlc_i,
  output logic [N_BITS-1:0] data_o      // recovered encrypted word D
);

  kernel_t sel;

  always_comb begin
    sel = kernels_i[0];
    for (int i = 1; i < int'(R); i++)
      if (aux_i[AW-1 -: IW] == IW'(i)) sel = kernels_i[i];
    for (int j = 0; j < int'(P_PARTS); j++) begin
      kernel_t k;
      k = aux_i[P_PARTS-1-j] ? ~sel : sel;
      data_o[N_BITS-1-j*M_BITS -: M_BITS] =
        code_i[N_BITS-1-j*M_BITS -: M_BITS] ^ effective_kernel(k, mlc_i);
    end
  end

endmodule
