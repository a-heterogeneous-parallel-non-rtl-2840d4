// shift_unit (SU): one multiplication-less weight product.
//
// Computes p = s * (P(a,n1) + P(a,n2) + P(a,n3)), where P(a,n) shifts the
// Q2.10 input a left by n for n > 0, right (arithmetic, i.e. rounding toward
// minus infinity) by -n for n < 0, and passes a for n = 0. This is the
// base-2 shift-sum that replaces the multiply of a multiply-accumulate: three
// shifters, one adder and a sign selector that passes, negates or zeroes the
// sum. The weight's shift parameters come straight from the layer's local
// parameter memory.
//
// Interface: a (Q2.10 input), w (stored sign and exponents), p (product in
// the 32-bit accumulator format, still with 10 fractional bits).
// Timing: purely combinational; the matrix unit registers p.
//
// Follows the specification: K = 3 terms, stored {s, n1, n2, n3}, the sum
// then the sign select. Own choices: the exponent encoding (mlmd_pkg), with
// an absent term contributing zero, and support for left shifts: the unit's
// drawing shows only right shifts, while the shift function P(x,n) of the
// quantisation scheme defines both directions; the latter is followed.
module shift_unit
  import mlmd_pkg::*;
(
  input  fx_t          a,
  input  shift_param_t w,
  output acc_t         p
);

  function automatic acc_t p_shift(input fx_t v, input exp_t n);
    acc_t xe;
    xe = acc_t'(v);  // sign extension
    if (n == EXP_NONE)  return '0;
    else if (n > 0)     return xe <<< n;
    else if (n < 0)     return xe >>> (-n);
    else                return xe;
  endfunction

  acc_t sum;

  always_comb begin
    sum = '0;
    for (int i = 0; i < int'(K_SHIFT); i++)
      sum += p_shift(a, exp_t'(w.n[i]));
    unique case (w.s)
      SGN_POS: p = sum;
      SGN_NEG: p = -sum;
      default: p = '0;
    endcase
  end

endmodule
