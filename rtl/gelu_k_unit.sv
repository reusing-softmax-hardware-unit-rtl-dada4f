// GELU argument unit, k = a * (z + b * z^3) with a = sqrt(2/pi), b = 0.044715.
//
// The 16-bit input z (Q5.11) is widened to Q16.16, then z^2, z^3, b*z^3 and
// a*(z + b*z^3) are formed with four multipliers and one adder; a second
// output gives -k for the partner softmax lane. Formula, constants and the
// negation follow the paper. Each product is 32 x 32 -> 64 bits truncated back
// to Q16.16; for |z| < 16 the largest value, |k| < 160, fits easily. Purely
// combinational.
//
// Interface: z in_t (Q5.11); k and k_neg signed Q16.16.
module gelu_k_unit
  import gelu_softmax_pkg::*;
(
  input  in_t z,
  output fx_t k,
  output fx_t k_neg
);

  fx_t zw, z2, z3, bz3;

  always_comb begin
    zw    = widen(z);
    z2    = fx_mul(zw, zw);
    z3    = fx_mul(z2, zw);
    bz3   = fx_mul(z3, GELU_B);
    k     = fx_mul(zw + bz3, GELU_A);
    k_neg = -k;
  end

endmodule
