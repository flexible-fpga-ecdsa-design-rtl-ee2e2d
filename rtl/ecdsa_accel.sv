// ecdsa_accel: the flexible ECDSA crypto-accelerator. The host software
// computes hashes, u1 = e/s and u2 = r/s and draws the random k; this
// hardware holds the parameters of B-233 and B-283 (curve_rom) and executes
// the elliptic-curve point operations on command:
//   CMD_SEL_EC  select the curve (cmd_ec) for the following commands
//   CMD_KPUB    (x, y) = k * Pub
//   CMD_KG      (x, y) = k * G
//   CMD_VERIFY  (x, y) = u1 * G + u2 * Pub   (k carries u1, k2 carries u2)
// A verification runs two jobs on the kP core: u1*G, stored, then u2*Pub
// followed by the affine addition of both. The result x is x_T of the
// signature protocol; the host compares x_T mod n with r.
// Interface: a command is accepted when cmd_valid and cmd_ready are both
// high. k, k2, pub_x and pub_y must be held stable until done. done pulses
// for one cycle when x_out, y_out are valid (also after CMD_SEL_EC). Scalars
// must have bit l-1 set (the host may add a multiple of the group order).
// err reports a degenerate case (see kp_ctrl). slot_start marks the first
// cycle of each 54-cycle scalar-bit slot, mul_start each field product.
// The command set and the stored parameters follow the design description;
// the encoding, the handshake and running a verification as two ladder
// jobs plus an affine addition are this design's choice. Synchronous
// active-low reset; the selected curve resets to B-233.
module ecdsa_accel
  import ecc_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   cmd_valid,
  output logic   cmd_ready,
  input  cmd_t   cmd,
  input  ec_t    cmd_ec,
  input  felem_t k,
  input  felem_t k2,
  input  felem_t pub_x,
  input  felem_t pub_y,
  output ec_t    ec_sel,
  output logic   busy,
  output logic   done,
  output logic   err,
  output felem_t x_out,
  output felem_t y_out,
  output logic   slot_start,
  output logic   mul_start
);
  typedef enum logic [2:0] {A_IDLE, A_JOB1, A_WAIT1, A_JOB2, A_WAIT2} astate_t;

  astate_t state;
  logic    two_jobs, use_g1;   // job 1 works on G, job 2 on Pub
  felem_t  gx, gy, b;
  logic    core_start, core_busy, core_done, core_err, second;
  felem_t  core_k, core_px, core_py;

  curve_rom u_rom (.ec(ec_sel), .gx, .gy, .b);

  assign second  = (state == A_JOB2) || (state == A_WAIT2);
  assign core_k  = second ? k2 : k;
  assign core_px = (!second && use_g1) ? gx : pub_x;
  assign core_py = (!second && use_g1) ? gy : pub_y;
  assign core_start = (state == A_JOB1) || (state == A_JOB2);

  kp_core u_core (
    .clk, .rst_n, .ec(ec_sel), .start(core_start), .add_prev(second),
    .k(core_k), .px(core_px), .py(core_py), .b,
    .busy(core_busy), .done(core_done), .err(core_err),
    .slot_start, .mul_start, .xr(x_out), .yr(y_out)
  );

  assign cmd_ready = (state == A_IDLE);
  assign busy      = (state != A_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= A_IDLE;
      ec_sel   <= EC_B233;
      two_jobs <= 1'b0;
      use_g1   <= 1'b0;
      done     <= 1'b0;
      err      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        A_IDLE: if (cmd_valid) begin
          unique case (cmd)
            CMD_SEL_EC: begin ec_sel <= cmd_ec; done <= 1'b1; end
            CMD_KPUB:   begin state <= A_JOB1; use_g1 <= 1'b0; two_jobs <= 1'b0; end
            CMD_KG:     begin state <= A_JOB1; use_g1 <= 1'b1; two_jobs <= 1'b0; end
            default:    begin state <= A_JOB1; use_g1 <= 1'b1; two_jobs <= 1'b1; end
          endcase
          err <= 1'b0;
        end
        A_JOB1:  state <= A_WAIT1;
        A_WAIT1: if (core_done) begin
          err <= core_err;
          if (two_jobs) state <= A_JOB2;
          else begin state <= A_IDLE; done <= 1'b1; end
        end
        A_JOB2:  state <= A_WAIT2;
        A_WAIT2: if (core_done) begin
          err   <= err | core_err;
          state <= A_IDLE;
          done  <= 1'b1;
        end
        default: state <= A_IDLE;
      endcase
    end
  end

  a_core_idle: assert property (@(posedge clk) disable iff (!rst_n) core_start |-> !core_busy);
endmodule
