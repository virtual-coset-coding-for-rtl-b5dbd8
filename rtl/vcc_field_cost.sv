// vcc_field_cost: cost of writing one candidate field over the stored one.
//
// Energy: in SLC mode one unit per changed bit; in MLC mode, per changed
// two-bit symbol, E_HIGH if the new symbol's right digit (its low bit) is 1
// and E_LOW otherwise, nothing for an unchanged symbol. Stuck-at-wrong (SAW)
// count: changed bits (SLC) or changed symbols (MLC) whose cell is flagged
// stuck; an MLC cell counts as stuck when either of its two flags is set.
// The two are merged into one scalar: the primary objective (chosen by
// saw_first_i) above bit COST_SHIFT, the secondary one below it, so a plain
// comparison orders by the primary objective first; sums of up to 36 MLC
// symbols or 72 SLC bits cannot carry from the lower field into the upper. W must be even and at most 32 (the
// counters are sized for that). Combinational.
module vcc_field_cost
  import vcc_pkg::*;
#(
  parameter int unsigned W = M_BITS
) (
  input  logic [W-1:0] new_i,
  input  logic [W-1:0] old_i,
  input  logic [W-1:0] stuck_i,
  input  logic         mlc_i,
  input  logic         saw_first_i,
  output cost_t        cost_o
);

  logic [8:0] energy;   // at most 16 symbols * E_HIGH
  logic [5:0] saw;      // at most 32 bits

  always_comb begin
    energy = '0;
    saw    = '0;
    if (mlc_i) begin
      for (int s = 0; s < int'(W / 2); s++) begin
        if (new_i[2*s+1 -: 2] != old_i[2*s+1 -: 2]) begin
          energy += new_i[2*s] ? 9'(E_HIGH) : 9'(E_LOW);
          if (stuck_i[2*s] || stuck_i[2*s+1]) saw += 6'd1;
        end
      end
    end else begin
      for (int b = 0; b < int'(W); b++) begin
        if (new_i[b] != old_i[b]) begin
          energy += 9'd1;
          if (stuck_i[b]) saw += 6'd1;
        end
      end
    end
    cost_o = saw_first_i ? cost_t'({saw, COST_SHIFT'(energy)})
                         : cost_t'({energy, COST_SHIFT'(saw)});
  end

endmodule
