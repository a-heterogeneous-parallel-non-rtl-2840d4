// newton3_oxygen: force on the oxygen atom of a water molecule from
// Newton's third law.
//
// Only the forces on the two hydrogen atoms are predicted by the MLP chips;
// with no external field the three forces of an isolated molecule sum to
// zero, so F_O = -(F_H1 + F_H2), component by component.
//
// Interface: f_h1, f_h2 (DIM components, Q2.10); f_o (DIM components, Q2.10,
// saturated to the Q2.10 range). Timing: combinational.
//
// Follows the specification: the oxygen force comes from Newton's third law
// rather than from a network. Own choice: saturation instead of wrap-around.
module newton3_oxygen
  import mlmd_pkg::*;
#(
  parameter int unsigned DIM = 2
) (
  input  fx_t f_h1 [DIM],
  input  fx_t f_h2 [DIM],
  output fx_t f_o  [DIM]
);

  always_comb begin
    for (int d = 0; d < int'(DIM); d++)
      f_o[d] = sat_fx(-(acc_t'(f_h1[d]) + acc_t'(f_h2[d])));
  end

endmodule
