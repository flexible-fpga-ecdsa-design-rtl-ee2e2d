// kp_core: the flexible kP accelerator. It computes the affine point k*P on
// B-233 or B-283 and, with add_prev, adds it to the point it computed in the
// job before (the two scalar products of u1*G + u2*Pub share the datapath).
// Blocks: controller (kp_ctrl), bus (kp_bus), flexible ALU with field
// addition and squaring (flex_alu), one flexible field multiplier
// (flex_mult) and the bank of 283-bit registers (kp_regfile).
// Interface: start is sampled when busy is low; k, px, py, b and ec must be
// stable while busy. k must have bit l-1 set (l = 233 or 283). done pulses
// when (xr, yr) holds the result; err reports a degenerate case (point at
// infinity, x = 0, or equal x in the final addition).
// Timing: 3 + 5 cycles of set-up, 54 cycles for each of the l-1 scalar bits,
// 2 drain cycles, then the affine conversion (about 12(l-2) cycles for the
// inversion plus about 130) and, for add_prev, the addition (one more
// inversion).
// The block structure follows the design description (controller, bus,
// ALU, one multiplier, 283-bit registers); affine conversion and point
// addition on this datapath are this design's choice.
module kp_core
  import ecc_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  ec_t    ec,
  input  logic   start,
  input  logic   add_prev,
  input  felem_t k,
  input  felem_t px,
  input  felem_t py,
  input  felem_t b,
  output logic   busy,
  output logic   done,
  output logic   err,
  output logic   slot_start,
  output logic   mul_start,
  output felem_t xr,
  output felem_t yr
);
  reg_t     ra_a, ra_b, wa;
  logic     we, mul_done, mul_ready;
  wb_src_t  wb_src;
  ext_sel_t ext_sel;
  alu_op_t  alu_op;
  felem_t   rd_a, rd_b, wd, alu_y, mul_c;

  kp_ctrl u_ctrl (
    .clk, .rst_n, .ec, .start, .add_prev, .k,
    .ra_a, .ra_b, .we, .wa, .wb_src, .ext_sel, .alu_op, .mul_start,
    .mul_done, .wd_zero(wd == '0),
    .busy, .done, .err, .slot_start
  );

  kp_regfile u_rf (
    .clk, .rst_n, .ra_a, .ra_b, .rd_a, .rd_b, .we, .wa, .wd, .xr, .yr
  );

  kp_bus u_bus (
    .clk, .rst_n, .wd,
    .wb_src, .we, .alu_y, .mul_c, .mul_done,
    .ext_sel, .ext_px(px), .ext_py(py), .ext_b(b)
  );

  // operand lines: both read ports feed the ALU and the multiplier
  flex_alu u_alu (.op(alu_op), .ec, .a(rd_a), .b(rd_b), .y(alu_y));

  flex_mult u_mul (
    .clk, .rst_n, .ec, .start(mul_start), .a(rd_a), .b(rd_b),
    .ready(mul_ready), .done(mul_done), .c(mul_c)
  );

  a_mul_ready: assert property (@(posedge clk) disable iff (!rst_n) mul_start |-> mul_ready);
endmodule
