// processing_element: one PE of the SC decoder's processing unit.
//
// Computes either the check-node function f(a,b) = sgn(a)sgn(b)min(|a|,|b|)
// or the variable-node function g(a,b,s) = (-1)^s a + b on two LLRs, as
// selected by `sel_g`. `s` is the partial sum S the g function needs. The
// min-sum f and the sum g follow the paper; the result is saturated to the
// symmetric LLR range of polar_pkg, which is this design's choice. Purely
// combinational.
module processing_element
  import polar_pkg::*;
(
  input  llr_t a,
  input  llr_t b,
  input  logic s,
  input  logic sel_g,
  output llr_t y
);

  always_comb y = sel_g ? llr_g(a, b, s) : llr_f(a, b);

endmodule
