// kp_bus: the result side of the bus of the kP accelerator. The two register
// read ports drive the operand lines of both the ALU and the multiplier
// directly (wired in kp_core); this block is the single result line that
// carries back to the register file either the ALU result, the multiplier's
// product or an external value (x or y of the input point, or the curve
// constant b, selected by ext_sel). One result per clock cycle. The controller must not write the multiplier result unless the
// product is valid; an assertion checks it. Combinational.
// The description only names the bus; this structure is this design's own.
module kp_bus
  import ecc_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  output felem_t   wd,       // to the register file write port
  // result sources
  input  wb_src_t  wb_src,
  input  logic     we,
  input  felem_t   alu_y,
  input  felem_t   mul_c,
  input  logic     mul_done,
  input  ext_sel_t ext_sel,
  input  felem_t   ext_px,
  input  felem_t   ext_py,
  input  felem_t   ext_b
);
  felem_t ext;

  always_comb begin
    unique case (ext_sel)
      EXT_PY:  ext = ext_py;
      EXT_B:   ext = ext_b;
      default: ext = ext_px;
    endcase
    unique case (wb_src)
      WB_MUL:  wd = mul_c;
      WB_EXT:  wd = ext;
      default: wd = alu_y;
    endcase
  end

  a_mul_valid: assert property (@(posedge clk) disable iff (!rst_n)
                                (we && wb_src == WB_MUL) |-> mul_done);
endmodule
