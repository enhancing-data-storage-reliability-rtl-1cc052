// gf_mult -- combinational GF(2^9) multiplier in Mastrovito (matrix) form.
//
// The product p = a * b is formed as a matrix-vector product over GF(2):
// column j of the m x m matrix is a * alpha^j, already reduced by the
// primitive polynomial, and p is the XOR of the columns selected by the bits
// of b. Building the reduced columns first merges the two usual steps
// (polynomial product, then reduction) into one XOR array, which is the
// Mastrovito construction. Purely combinational: no clock, no latency.
// The field and primitive polynomial come from gf_pkg; using this form for
// the general multipliers of the Berlekamp-Massey stage is this design's choice.
module gf_mult
  import gf_pkg::*;
(
  input  gf_t a,
  input  gf_t b,
  output gf_t p
);

  gf_t col [GF_M];   // col[j] = a * alpha^j

  always_comb begin
    col[0] = a;
    for (int j = 1; j < int'(GF_M); j++) col[j] = gf_mul_alpha(col[j-1]);
    p = '0;
    for (int j = 0; j < int'(GF_M); j++)
      if (b[j]) p = p ^ col[j];
  end

endmodule
