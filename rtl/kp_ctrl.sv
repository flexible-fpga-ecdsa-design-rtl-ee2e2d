// kp_ctrl: controller of the flexible kP accelerator.
// It computes k*P with the Montgomery ladder in Lopez-Dahab projective
// coordinates (Algorithm 1 of the design description), converts the result
// to affine coordinates and, on request, adds it to the previously computed
// point (for u1*G + u2*Pub). It drives the bus every cycle: two register
// read addresses, the ALU opcode or a multiplier start, and one write-back.
//
// Phases
//  LOAD  (3 cycles)  x, y of P and the curve constant b are written into the
//                    register file from outside.
//  INIT  (5 cycles)  X1 = x, Z1 = 1, Z2 = x^2, X2 = x^4 + b.
//  LOOP  (54 cycles per bit, bits l-2 .. 0 of k; k_{l-1} must be 1)
//        Six field products run back to back in the multiplier (9 cycles
//        each); squarings and additions are done by the ALU in cycles in
//        which the multiplier does not use the bus. With a = the point that
//        is added into (1 if k_i = 1, else 2) and d = the point that is
//        doubled, and pa/pd the same roles of the previous bit:
//          M1 = X_pd * Z_pa   M2 = X_pa * Z_pd   M3 = b * Z_d^4
//          M4 = M1 * M2       M5 = x * Z_a'      M6 = X_d^2 * Z_d^2
//          Z_a' = (M1 + M2)^2, X_a' = M5 + M4, X_d' = X_d^4 + M3, Z_d' = M6
//        The product with b is the 3rd and the product with x the 5th of
//        the slot. M1 and M2 are ordered so that the operand written last in
//        the previous slot (Z_d' = M6, written in cycle 1) is needed only by
//        M2, which is what lets the products run without a gap.
//        Cycle plan of a slot (c = 0..53; a product issued in cycle c runs in
//        c+1..c+9 and is written back in c+10):
//          c0 issue M1 | c1 Z_pd <= M6 of previous slot | c2 T2 = Z_d^2
//          c3 T3 = T2^2 | c4 T4 = X_d^2 | c5 T5 = T4^2 | c9 issue M2
//          c10 T0 <= M1 | c18 issue M3 = b*T3 | c19 T1 <= M2 | c20 Z_a = T0+T1
//          c21 Z_a = Z_a^2 | c27 issue M4 = T0*T1 | c28 T3 <= M3
//          c29 X_d = T5+T3 | c36 issue M5 = x*Z_a | c37 T5 <= M4
//          c45 issue M6 = T4*T2 | c46 T0 <= M5 | c47 X_a = T0+T5
//  DRAIN (2 cycles)  write the last M6.
//  POST  micro-program (see prog()): x1 = X1/Z1 and
//        y1 = y + (x+x1)[(X1+xZ1)(X2+xZ2) + (x^2+y)Z1Z2]/(xZ1Z2), one inversion
//        of xZ1Z2 by Fermat's little theorem (a^(2^l-2), l-2 square-and-
//        multiply steps). Then either (x1,y1) is stored in XR,YR or, with
//        add_prev, the affine sum (XR,YR) + (x1,y1) is stored there.
// Interface: start is sampled in IDLE with k, add_prev (and ec, which must
// stay stable). done pulses for one cycle at the end; err is set if a point
// at infinity, x = 0, or two points with equal x (doubling inside the
// addition) would occur, cases this design does not handle.
// Follows the design description: Algorithm 1, the single multiplier with
// one squarer and adder in the ALU, 6 products and 54 cycles per key bit, the
// 3rd product with b and the 5th with x. This design's own choices: the
// register allocation, the cycle plan, the inversion method and the
// post-processing program.
module kp_ctrl
  import ecc_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  ec_t      ec,
  input  logic     start,
  input  logic     add_prev,
  input  felem_t   k,
  // bus control
  output reg_t     ra_a,
  output reg_t     ra_b,
  output logic     we,
  output reg_t     wa,
  output wb_src_t  wb_src,
  output ext_sel_t ext_sel,
  output alu_op_t  alu_op,
  output logic     mul_start,
  input  logic     mul_done,
  input  logic     wd_zero,
  // status
  output logic     busy,
  output logic     done,
  output logic     err,
  output logic     slot_start   // first cycle of a 54-cycle slot
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_INIT, S_LOOP, S_DRAIN, S_POST} state_t;

  typedef enum logic [2:0] {U_PASS, U_ADD, U_SQR, U_MUL, U_INV, U_FORK, U_END} uop_t;
  typedef struct packed {
    uop_t op;
    reg_t dst;
    reg_t sa;
    reg_t sb;
    logic chk;     // flag an error if the written value is zero
  } uinst_t;

  localparam logic [5:0] PC_ADD = 6'd22;

  function automatic uinst_t prog(logic [5:0] pc);
    case (pc)
      // affine conversion of (X1:Z1), (X2:Z2)
      6'd0:  return '{U_MUL, R_T0, R_Z1, R_Z2, 1'b0};   // Z1Z2
      6'd1:  return '{U_MUL, R_T1, R_X,  R_T0, 1'b1};   // xZ1Z2
      6'd2:  return '{U_INV, R_T2, R_T1, R_T1, 1'b0};   // 1/(xZ1Z2)
      6'd3:  return '{U_MUL, R_T3, R_X,  R_Z2, 1'b0};   // xZ2
      6'd4:  return '{U_MUL, R_T4, R_X1, R_T3, 1'b0};   // X1 x Z2
      6'd5:  return '{U_MUL, R_T4, R_T4, R_T2, 1'b0};   // x1 = X1/Z1
      6'd6:  return '{U_ADD, R_T3, R_T3, R_X2, 1'b0};   // X2 + xZ2
      6'd7:  return '{U_MUL, R_T5, R_X,  R_Z1, 1'b0};   // xZ1
      6'd8:  return '{U_ADD, R_T5, R_T5, R_X1, 1'b0};   // X1 + xZ1
      6'd9:  return '{U_MUL, R_T5, R_T5, R_T3, 1'b0};
      6'd10: return '{U_SQR, R_T3, R_X,  R_X,  1'b0};   // x^2
      6'd11: return '{U_ADD, R_T3, R_T3, R_Y,  1'b0};   // x^2 + y
      6'd12: return '{U_MUL, R_T3, R_T3, R_T0, 1'b0};   // (x^2+y)Z1Z2
      6'd13: return '{U_ADD, R_T5, R_T5, R_T3, 1'b0};
      6'd14: return '{U_MUL, R_T5, R_T5, R_T2, 1'b0};   // / (xZ1Z2)
      6'd15: return '{U_ADD, R_T3, R_X,  R_T4, 1'b0};   // x + x1
      6'd16: return '{U_MUL, R_T5, R_T5, R_T3, 1'b0};
      6'd17: return '{U_ADD, R_T5, R_T5, R_Y,  1'b0};   // y1
      6'd18: return '{U_FORK, R_T0, R_T0, R_T0, 1'b0};
      6'd19: return '{U_PASS, R_XR, R_T4, R_T4, 1'b0};
      6'd20: return '{U_PASS, R_YR, R_T5, R_T5, 1'b0};
      6'd21: return '{U_END, R_T0, R_T0, R_T0, 1'b0};
      // affine addition (XR,YR) + (T4,T5), a = 1
      6'd22: return '{U_ADD, R_T0, R_XR, R_T4, 1'b1};   // x1 + x2
      6'd23: return '{U_ADD, R_T1, R_YR, R_T5, 1'b0};   // y1 + y2
      6'd24: return '{U_INV, R_T2, R_T0, R_T0, 1'b0};
      6'd25: return '{U_MUL, R_T1, R_T1, R_T2, 1'b0};   // lambda
      6'd26: return '{U_SQR, R_T3, R_T1, R_T1, 1'b0};
      6'd27: return '{U_ADD, R_T3, R_T3, R_T1, 1'b0};
      6'd28: return '{U_ADD, R_T3, R_T3, R_T0, 1'b0};
      6'd29: return '{U_ADD, R_T3, R_T3, R_ONE, 1'b0};  // x3
      6'd30: return '{U_ADD, R_T0, R_XR, R_T3, 1'b0};   // x1 + x3
      6'd31: return '{U_MUL, R_T0, R_T0, R_T1, 1'b0};
      6'd32: return '{U_ADD, R_T0, R_T0, R_T3, 1'b0};
      6'd33: return '{U_ADD, R_T0, R_T0, R_YR, 1'b0};   // y3
      6'd34: return '{U_PASS, R_XR, R_T3, R_T3, 1'b0};
      6'd35: return '{U_PASS, R_YR, R_T0, R_T0, 1'b0};
      default: return '{U_END, R_T0, R_T0, R_T0, 1'b0};
    endcase
  endfunction

  typedef enum logic [2:0] {IV_INIT, IV_SQR, IV_MUL, IV_WAIT, IV_FINAL} inv_ph_t;

  state_t     state;
  logic [5:0] cyc;          // cycle within a phase / slot
  logic [8:0] bit_i;        // current bit of k
  felem_t     kreg;
  logic       pbit;         // bit of the previous slot
  logic       first_slot;
  logic       add_q;
  logic [5:0] pc;
  logic       mwait;        // POST: waiting for a product
  inv_ph_t    iv_ph;
  logic [8:0] iv_cnt;
  uinst_t     ui;

  // register of coordinate X or Z of ladder point n (1 or 2)
  function automatic reg_t xreg(logic one);
    return one ? R_X1 : R_X2;
  endfunction
  function automatic reg_t zreg(logic one);
    return one ? R_Z1 : R_Z2;
  endfunction

  logic kb;                 // k_i of the current slot: a = 1 if kb
  assign kb = kreg[bit_i];
  assign ui = prog(pc);

  // ---------------------------------------------------------------- outputs
  always_comb begin
    ra_a      = R_X;
    ra_b      = R_X;
    we        = 1'b0;
    wa        = R_T0;
    wb_src    = WB_ALU;
    ext_sel   = EXT_PX;
    alu_op    = ALU_PASS;
    mul_start = 1'b0;
    unique case (state)
      S_LOAD: begin
        we     = 1'b1;
        wb_src = WB_EXT;
        unique case (cyc[1:0])
          2'd0:    begin wa = R_X; ext_sel = EXT_PX; end
          2'd1:    begin wa = R_Y; ext_sel = EXT_PY; end
          default: begin wa = R_B; ext_sel = EXT_B;  end
        endcase
      end
      S_INIT: begin
        we = 1'b1;
        unique case (cyc[2:0])
          3'd0: begin wa = R_X1; ra_a = R_X;   alu_op = ALU_PASS; end
          3'd1: begin wa = R_Z1; ra_a = R_ONE; alu_op = ALU_PASS; end
          3'd2: begin wa = R_Z2; ra_a = R_X;   alu_op = ALU_SQR;  end
          3'd3: begin wa = R_X2; ra_a = R_Z2;  alu_op = ALU_SQR;  end
          default: begin wa = R_X2; ra_a = R_X2; ra_b = R_B; alu_op = ALU_ADD; end
        endcase
      end
      S_LOOP: begin
        unique case (cyc)
          6'd0:  begin mul_start = 1'b1; ra_a = xreg(!pbit); ra_b = zreg(pbit); end
          6'd1:  begin we = !first_slot; wb_src = WB_MUL; wa = zreg(!pbit); end
          6'd2:  begin we = 1'b1; wa = R_T2; ra_a = zreg(!kb); alu_op = ALU_SQR; end
          6'd3:  begin we = 1'b1; wa = R_T3; ra_a = R_T2;    alu_op = ALU_SQR; end
          6'd4:  begin we = 1'b1; wa = R_T4; ra_a = xreg(!kb); alu_op = ALU_SQR; end
          6'd5:  begin we = 1'b1; wa = R_T5; ra_a = R_T4;    alu_op = ALU_SQR; end
          6'd9:  begin mul_start = 1'b1; ra_a = xreg(pbit); ra_b = zreg(!pbit); end
          6'd10: begin we = 1'b1; wb_src = WB_MUL; wa = R_T0; end
          6'd18: begin mul_start = 1'b1; ra_a = R_B; ra_b = R_T3; end
          6'd19: begin we = 1'b1; wb_src = WB_MUL; wa = R_T1; end
          6'd20: begin we = 1'b1; wa = zreg(kb); ra_a = R_T0; ra_b = R_T1; alu_op = ALU_ADD; end
          6'd21: begin we = 1'b1; wa = zreg(kb); ra_a = zreg(kb); alu_op = ALU_SQR; end
          6'd27: begin mul_start = 1'b1; ra_a = R_T0; ra_b = R_T1; end
          6'd28: begin we = 1'b1; wb_src = WB_MUL; wa = R_T3; end
          6'd29: begin we = 1'b1; wa = xreg(!kb); ra_a = R_T5; ra_b = R_T3; alu_op = ALU_ADD; end
          6'd36: begin mul_start = 1'b1; ra_a = R_X; ra_b = zreg(kb); end
          6'd37: begin we = 1'b1; wb_src = WB_MUL; wa = R_T5; end
          6'd45: begin mul_start = 1'b1; ra_a = R_T4; ra_b = R_T2; end
          6'd46: begin we = 1'b1; wb_src = WB_MUL; wa = R_T0; end
          6'd47: begin we = 1'b1; wa = xreg(kb); ra_a = R_T0; ra_b = R_T5; alu_op = ALU_ADD; end
          default: ;
        endcase
      end
      S_DRAIN: begin
        if (cyc == 6'd1) begin we = 1'b1; wb_src = WB_MUL; wa = zreg(!pbit); end
      end
      S_POST: begin
        unique case (ui.op)
          U_PASS, U_ADD, U_SQR: begin
            we     = 1'b1;
            wa     = ui.dst;
            ra_a   = ui.sa;
            ra_b   = ui.sb;
            alu_op = (ui.op == U_ADD) ? ALU_ADD : (ui.op == U_SQR) ? ALU_SQR : ALU_PASS;
          end
          U_MUL: begin
            ra_a = ui.sa;
            ra_b = ui.sb;
            wa   = ui.dst;
            if (!mwait) mul_start = 1'b1;
            else if (mul_done) begin we = 1'b1; wb_src = WB_MUL; end
          end
          U_INV: begin
            wa = ui.dst;
            unique case (iv_ph)
              IV_INIT:  begin we = 1'b1; ra_a = ui.sa;  alu_op = ALU_PASS; end
              IV_SQR,
              IV_FINAL: begin we = 1'b1; ra_a = ui.dst; alu_op = ALU_SQR;  end
              IV_MUL:   begin mul_start = 1'b1; ra_a = ui.dst; ra_b = ui.sa; end
              default:  begin we = mul_done; wb_src = WB_MUL; end
            endcase
          end
          default: ;
        endcase
      end
      default: ;
    endcase
  end

  assign busy       = (state != S_IDLE);
  assign slot_start = (state == S_LOOP) && (cyc == '0);

  // ---------------------------------------------------------------- sequencing
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cyc        <= '0;
      bit_i      <= '0;
      kreg       <= '0;
      pbit       <= 1'b1;
      first_slot <= 1'b1;
      add_q      <= 1'b0;
      pc         <= '0;
      mwait      <= 1'b0;
      iv_ph      <= IV_INIT;
      iv_cnt     <= '0;
      done       <= 1'b0;
      err        <= 1'b0;
    end else begin
      done <= 1'b0;
      if (state == S_POST && we && ui.chk && wd_zero) err <= 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_LOAD;
          cyc   <= '0;
          kreg  <= k;
          add_q <= add_prev;
          err   <= 1'b0;
        end
        S_LOAD: begin
          cyc <= cyc + 6'd1;
          if (cyc == 6'd2) begin state <= S_INIT; cyc <= '0; end
        end
        S_INIT: begin
          cyc <= cyc + 6'd1;
          if (cyc == 6'd4) begin
            state      <= S_LOOP;
            cyc        <= '0;
            bit_i      <= 9'(ec_len(ec) - 2);
            pbit       <= 1'b1;
            first_slot <= 1'b1;
          end
        end
        S_LOOP: begin
          if (cyc == 6'(SLOT_CYCLES - 1)) begin
            cyc        <= '0;
            pbit       <= kb;
            first_slot <= 1'b0;
            if (bit_i == '0) state <= S_DRAIN;
            else             bit_i <= bit_i - 9'd1;
          end else begin
            cyc <= cyc + 6'd1;
          end
        end
        S_DRAIN: begin
          cyc <= cyc + 6'd1;
          if (cyc == 6'd1) begin
            state <= S_POST;
            pc    <= '0;
            mwait <= 1'b0;
            iv_ph <= IV_INIT;
          end
        end
        S_POST: begin
          unique case (ui.op)
            U_PASS, U_ADD, U_SQR: pc <= pc + 6'd1;
            U_MUL: begin
              if (!mwait) mwait <= 1'b1;
              else if (mul_done) begin mwait <= 1'b0; pc <= pc + 6'd1; end
            end
            U_INV: begin
              unique case (iv_ph)
                IV_INIT:  begin iv_ph <= IV_SQR; iv_cnt <= 9'(ec_len(ec) - 2); end
                IV_SQR:   iv_ph <= IV_MUL;
                IV_MUL:   iv_ph <= IV_WAIT;
                IV_WAIT:  if (mul_done) begin
                  iv_cnt <= iv_cnt - 9'd1;
                  iv_ph  <= (iv_cnt == 9'd1) ? IV_FINAL : IV_SQR;
                end
                default:  begin iv_ph <= IV_INIT; pc <= pc + 6'd1; end
              endcase
            end
            U_FORK: pc <= add_q ? PC_ADD : pc + 6'd1;
            default: begin state <= S_IDLE; done <= 1'b1; end
          endcase
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
