// gf_sqr: flexible field squaring for B-233 and B-283.
// Squaring in GF(2^l) spreads the coefficients of A(t) onto the even
// positions (a_{l-1} 0 a_{l-2} 0 ... 0 a_0), which costs no gates, and then
// reduces the result modulo f(t) of the selected curve. The reduction is the
// fold of ecc_pkg::gf_reduce. Combinational: the result is stored at the next
// clock edge, so one squaring takes one clock cycle and runs in parallel with
// the field multiplier, as in the design description.
// Input a must be reduced (bits >= l zero); ec selects the curve.
// The zero-interleaving and the field polynomials follow the design
// description; the folding reduction circuit is this design's choice.
module gf_sqr
  import ecc_pkg::*;
(
  input  ec_t    ec,
  input  felem_t a,
  output felem_t y
);
  wide_t spread;

  always_comb begin
    spread = '0;
    for (int unsigned i = 0; i < LMAX; i++) spread[2*i] = a[i];
    y = gf_reduce(spread, ec);
  end
endmodule
