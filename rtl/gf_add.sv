// gf_add: addition of two elements of GF(2^l), the "field addition" unit of
// the flexible ALU. In a binary field addition is the bitwise XOR of the
// coefficient vectors, so the result needs no reduction and is correct for
// both B-233 and B-283 as long as the inputs are reduced. Purely
// combinational; the ALU result is stored by the register file at the next
// clock edge, so an addition takes one clock cycle.
// Follows the design description (addition is a bitwise XOR).
module gf_add
  import ecc_pkg::*;
(
  input  felem_t a,
  input  felem_t b,
  output felem_t y
);
  assign y = a ^ b;
endmodule
