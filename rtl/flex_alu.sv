// flex_alu: the flexible ALU of the kP accelerator. It holds the two cheap
// field operations, field addition (gf_add) and field squaring (gf_sqr), and
// a pass-through used to copy a register. One operation per clock cycle; the
// ALU itself is combinational and its result is written to the register file
// over the bus at the next edge.
// Inputs: op (ALU_PASS/ALU_ADD/ALU_SQR), ec, operands a and b. Output y.
// Addition and squaring in the ALU follow the design description; the copy
// operation is this design's addition.
module flex_alu
  import ecc_pkg::*;
(
  input  alu_op_t op,
  input  ec_t     ec,
  input  felem_t  a,
  input  felem_t  b,
  output felem_t  y
);
  felem_t sum, sq;

  gf_add u_add (.a(a), .b(b), .y(sum));
  gf_sqr u_sqr (.ec(ec), .a(a), .y(sq));

  always_comb begin
    unique case (op)
      ALU_ADD: y = sum;
      ALU_SQR: y = sq;
      default: y = a;
    endcase
  end
endmodule
