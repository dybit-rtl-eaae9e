// exp_adder: mixed-precision exponent adder (EXP. ADD) of a processing element.
//
// A decoded input-feature word carries 8/Pa exponents and a decoded weight
// word 8/Pw exponents. The PE forms the product of every input-feature
// sub-word u with every weight sub-word v (operand reuse), so this block
// produces one exponent sum per product lane, lane = u*(8/Pw) + v. Lanes the
// current mode does not use are 0.
//
// The adder is sixteen 4-bit lane adders whose operands are steered by the
// mode; the per-lane exponent sum follows the DyBit PE, while sharing one
// carry chain between low-precision adders is not modelled (this design's
// simplification; results are the same).
// Timing: purely combinational.
module exp_adder
  import dybit_pkg::*;
(
  input  dec_t  a,
  input  dec_t  w,
  input  prec_e a_prec,
  input  prec_e w_prec,
  output esum_t esum [LANES]
);
  always_comb begin
    int unsigned na, nw;
    na = prec_subs(a_prec);
    nw = prec_subs(w_prec);
    for (int unsigned l = 0; l < LANES; l++) begin
      if (l < na * nw)
        esum[l] = sub_e(a, a_prec, l / nw) + sub_e(w, w_prec, l % nw);
      else
        esum[l] = '0;
    end
  end
endmodule
