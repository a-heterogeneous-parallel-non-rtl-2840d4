// act_unit (AU): the hardware-friendly activation function
//
//   phi(x) = 1              for x >= 2
//          = x - x*|x|/4    for -2 < x < 2
//          = -1             for x <= -2
//
// which replaces tanh(x). The neuron sum q is first limited to [-2, 2]
// (one selector); at the limits the middle formula gives exactly +1 and -1,
// so the three cases share one datapath. A second selector forms |x| from
// the sign of x, one multiplier forms x*|x|, a fixed shifter divides by 4
// (and drops the 10 extra fractional bits of the product) and a subtracter
// forms the result.
//
// Interface: q (neuron sum, 32-bit, 10 fractional bits), phi (Q2.10 in
// [-1, 1]). Timing: combinational; the layer registers phi.
//
// Follows the specification: the formula, and the parts list (two selectors,
// a multiplier, a shifter, a subtracter). Own choices: the division by 4 is an
// arithmetic right shift, so the product is rounded toward minus infinity.
module act_unit
  import mlmd_pkg::*;
(
  input  acc_t q,
  output fx_t  phi
);

  localparam acc_t TWO = acc_t'(2 << FRAC_W);

  fx_t                          xc;    // q limited to [-2, 2]
  fx_t                          xa;    // |xc|
  logic signed [2*DATA_W-1:0]   prod;  // xc * |xc|, 20 fractional bits

  always_comb begin
    if (q > TWO)       xc = fx_t'(TWO);
    else if (q < -TWO) xc = fx_t'(-TWO);
    else               xc = fx_t'(q);
    xa   = xc[DATA_W-1] ? -xc : xc;
    prod = xc * xa;
    phi  = xc - fx_t'(prod >>> (FRAC_W + 2));
  end

endmodule
