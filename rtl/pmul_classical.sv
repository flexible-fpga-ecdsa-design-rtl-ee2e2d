// pmul_classical: the partial multiplier of the flexible field multiplier,
// a 71 x 71 bit polynomial (carry-less) multiplier built with the classical
// multiplication method: 71*71 AND gates form every a_i*b_j (row i is
// A AND b_i), and XOR gates add the 71 shifted rows. The product is 141 bits wide and is
// not reduced; reduction happens in the accumulator. Combinational; one
// partial product is formed per clock cycle of the field multiplier.
// The classical method and the 71x71 / 141-bit sizes follow the design
// description.
module pmul_classical
  import ecc_pkg::*;
#(
  parameter int unsigned W = SEG       // operand width, 71
) (
  input  logic [W-1:0]   a,
  input  logic [W-1:0]   b,
  output logic [2*W-2:0] p
);
  always_comb begin
    p = '0;
    for (int unsigned i = 0; i < W; i++)
      p ^= (2*W-1)'(a & {W{b[i]}}) << i;     // row i: a AND b_i, shifted
  end
endmodule
