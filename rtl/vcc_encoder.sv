// vcc_encoder: Virtual Coset Coding encoder for one 64-bit word,
// VCC(64, R*16, R), by default VCC(64,256,16).
//
// For every kernel R_i (all R in parallel) and every 16-bit partition d_j
// (all four in parallel) two candidates are formed, d_j ^ R_i and
// d_j ^ ~R_i, and each is costed against the stored partition o_j
// (vcc_field_cost). The cheaper one is kept and flag_j records whether the
// inverted kernel was used; the inverted form is taken only when it is
// strictly cheaper, as in the worked example of the design (ties keep the
// plain kernel). The kernel's total is the sum of its four partition costs
// plus the cost of writing its auxiliary index {i, flag0..flag3} over the
// stored auxiliary cells. The kernel with the lowest total wins, the lowest
// index on a tie. The outputs are the chosen code word X_opt and its index
// opt, with flag0 (partition d0 = D[63:48]) as the highest flag bit.
//
// In MLC mode only right digits are encoded: kernel bits on left-digit
// positions are ignored, so the left digits of the word pass unchanged and
// remain the seed from which vcc_coset_generator rebuilds the kernels on a
// read. In SLC mode every bit is encoded and the kernels come from a ROM.
// This split by mode is a choice of this design.
//
// Costs are those of vcc_field_cost: energy of the transitions plus
// stuck-at-wrong cells, ordered by opt_saw_first_i. Purely combinational;
// the caller registers the result. Size: 2*R*4 partition cost units, R aux
// cost units and an R-way minimum.
module vcc_encoder
  import vcc_pkg::*;
#(
  parameter int unsigned R  = R_KERN,
  localparam int unsigned IW = (R > 1) ? $clog2(R) : 1,
  localparam int unsigned AW = IW + P_PARTS
) (
  input  logic [N_BITS-1:0]    data_i,        // encrypted word D
  input  logic [N_BITS-1:0]    old_i,         // word stored now
  input  logic [AW-1:0]        old_aux_i,     // auxiliary bits stored now
  input  logic [N_BITS+AW-1:0] stuck_i,       // {data stuck flags, aux stuck flags}
  input  kernel_t              kernels_i [R],
  input  logic                 mlc_i,         // 1: MLC PCM, 0: SLC
  input  logic                 opt_saw_first_i,
  output logic [N_BITS-1:0]    code_o,        // X_opt
  output logic [AW-1:0]        aux_o,         // opt = {i, flag0 .. flag(p-1)}
  output cost_t                cost_o         // cost of the chosen candidate
);

  logic [N_BITS-1:0] x_best [R];
  logic [AW-1:0]     idx_best [R];
  cost_t             cost_best [R];

  for (genvar i = 0; i < int'(R); i++) begin : g_kern
    cost_t              part_cost [P_PARTS];
    logic [P_PARTS-1:0] flags;
    cost_t              aux_cost;

    for (genvar j = 0; j < int'(P_PARTS); j++) begin : g_part
      localparam int unsigned HI = N_BITS - 1 - j * M_BITS;
      kernel_t c0, c1;
      cost_t   k0, k1;

      assign c0 = data_i[HI -: M_BITS] ^ effective_kernel(kernels_i[i], mlc_i);
      assign c1 = data_i[HI -: M_BITS] ^ effective_kernel(~kernels_i[i], mlc_i);

      vcc_field_cost #(.W(M_BITS)) u_c0 (
        .new_i(c0), .old_i(old_i[HI -: M_BITS]), .stuck_i(stuck_i[HI + AW -: M_BITS]),
        .mlc_i, .saw_first_i(opt_saw_first_i), .cost_o(k0));
      vcc_field_cost #(.W(M_BITS)) u_c1 (
        .new_i(c1), .old_i(old_i[HI -: M_BITS]), .stuck_i(stuck_i[HI + AW -: M_BITS]),
        .mlc_i, .saw_first_i(opt_saw_first_i), .cost_o(k1));

      assign flags[P_PARTS-1-j]       = (k1 < k0);
      assign x_best[i][HI -: M_BITS]  = (k1 < k0) ? c1 : c0;
      assign part_cost[j]             = (k1 < k0) ? k1 : k0;
    end

    assign idx_best[i] = {IW'(i), flags};

    vcc_field_cost #(.W(AW)) u_aux (
      .new_i(idx_best[i]), .old_i(old_aux_i), .stuck_i(stuck_i[AW-1:0]),
      .mlc_i, .saw_first_i(opt_saw_first_i), .cost_o(aux_cost));

    always_comb begin
      cost_best[i] = aux_cost;
      for (int j = 0; j < int'(P_PARTS); j++) cost_best[i] += part_cost[j];
    end
  end

  // Minimum over kernels; strict comparison keeps the lowest index on ties.
  always_comb begin
    code_o = x_best[0];
    aux_o  = idx_best[0];
    cost_o = cost_best[0];
    for (int i = 1; i < int'(R); i++) begin
      if (cost_best[i] < cost_o) begin
        code_o = x_best[i];
        aux_o  = idx_best[i];
        cost_o = cost_best[i];
      end
    end
  end

endmodule
