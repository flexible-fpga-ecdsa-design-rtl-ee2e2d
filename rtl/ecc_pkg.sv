// ecc_pkg: types, constants and shared functions of the flexible ECDSA
// accelerator for the NIST binary curves B-233 and B-283.
//
// Every field element is carried in a 283-bit word (the larger field); for
// B-233 the bits 282..233 are zero. The field polynomials are the ones of
// the standard: f(t) = t^233 + t^74 + 1 and f(t) = t^283 + t^12 + t^7 + t^5 + 1.
// gf_reduce() folds a polynomial of degree up to 566 (the largest product
// the 4-segment Karatsuba multiplier forms) back below degree l. The fold
// count (3 for B-233, 2 for B-283) is the smallest that reaches degree < l.
// The register indices, ALU opcodes and command codes used across the
// design are defined here too.
package ecc_pkg;

  localparam int unsigned LMAX = 283;            // longest field (B-283)
  localparam int unsigned SEG  = 71;             // Karatsuba segment width
  localparam int unsigned PPW  = 2*SEG - 1;      // partial product width, 141
  localparam int unsigned NPP  = 9;              // partial products per field product
  localparam int unsigned WIDE = 8*SEG;          // 568: room for degree 566
  localparam int unsigned SLOT_CYCLES = 6*NPP;   // 54 cycles per scalar bit

  typedef logic [LMAX-1:0] felem_t;
  typedef logic [WIDE-1:0] wide_t;
  typedef logic [SEG-1:0]  seg_t;
  typedef logic [PPW-1:0]  pprod_t;

  typedef enum logic {EC_B233 = 1'b0, EC_B283 = 1'b1} ec_t;

  // field length l of the selected curve
  function automatic int unsigned ec_len(ec_t ec);
    return (ec == EC_B283) ? 283 : 233;
  endfunction

  // mask of the valid bits of a field element
  function automatic felem_t ec_mask(ec_t ec);
    return (ec == EC_B283) ? {LMAX{1'b1}} : felem_t'({233{1'b1}});
  endfunction

  // Reduction modulo f(t) by folding: the part of degree >= l is shifted down
  // by l and added back at the positions of the low terms of f(t).
  function automatic felem_t gf_reduce(wide_t a, ec_t ec);
    wide_t v, hi;
    v = a;
    if (ec == EC_B283) begin
      for (int unsigned n = 0; n < 2; n++) begin
        hi = v >> 283;
        v  = (v & wide_t'({283{1'b1}})) ^ hi ^ (hi << 5) ^ (hi << 7) ^ (hi << 12);
      end
    end else begin
      for (int unsigned n = 0; n < 3; n++) begin
        hi = v >> 233;
        v  = (v & wide_t'({233{1'b1}})) ^ hi ^ (hi << 74);
      end
    end
    return v[LMAX-1:0];
  endfunction

  // ---- register file of the kP core -------------------------------------
  // 15 field registers and one read-only constant (the field element 1).
  typedef enum logic [3:0] {
    R_X  = 4'd0,  R_Y  = 4'd1,  R_B  = 4'd2,          // input point, curve b
    R_X1 = 4'd3,  R_Z1 = 4'd4,  R_X2 = 4'd5, R_Z2 = 4'd6,  // ladder points
    R_T0 = 4'd7,  R_T1 = 4'd8,  R_T2 = 4'd9, R_T3 = 4'd10,
    R_T4 = 4'd11, R_T5 = 4'd12,                       // temporaries
    R_XR = 4'd13, R_YR = 4'd14,                       // result point
    R_ONE = 4'd15                                     // constant 1, read only
  } reg_t;
  localparam int unsigned NREG = 15;

  typedef enum logic [1:0] {ALU_PASS = 2'd0, ALU_ADD = 2'd1, ALU_SQR = 2'd2} alu_op_t;

  // source of the write-back value on the bus
  typedef enum logic [1:0] {WB_ALU = 2'd0, WB_MUL = 2'd1, WB_EXT = 2'd2} wb_src_t;

  // external value loaded into the register file at the start of a job
  typedef enum logic [1:0] {EXT_PX = 2'd0, EXT_PY = 2'd1, EXT_B = 2'd2} ext_sel_t;

  // commands of the accelerator (Fig. 1 of the design description)
  typedef enum logic [1:0] {
    CMD_SEL_EC = 2'd0,   // select B-233 or B-283
    CMD_KPUB   = 2'd1,   // k * Pub
    CMD_KG     = 2'd2,   // k * G
    CMD_VERIFY = 2'd3    // u1 * G + u2 * Pub
  } cmd_t;

endpackage
