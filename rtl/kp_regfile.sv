// kp_regfile: the 283-bit register bank of the kP accelerator. It holds 15
// field elements (input point x, y, curve constant b, the two Lopez-Dahab
// points X1:Z1 and X2:Z2, six temporaries and the result point XR, YR; see
// ecc_pkg::reg_t). Address R_ONE is not a register: it reads as the field
// element 1. Two combinational read ports feed the operands of the ALU or the
// multiplier; one write port takes the result from the bus at the clock
// edge. The result point is also brought out directly.
// The 283-bit register width follows the design description; the number of
// registers, the two read ports and the constant address are this
// design's choice. Synchronous active-low reset clears all registers.
module kp_regfile
  import ecc_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  reg_t   ra_a,
  input  reg_t   ra_b,
  output felem_t rd_a,
  output felem_t rd_b,
  input  logic   we,
  input  reg_t   wa,
  input  felem_t wd,
  output felem_t xr,
  output felem_t yr
);
  felem_t rf [NREG];

  function automatic felem_t rd(reg_t a, felem_t r [NREG]);
    return (a == R_ONE) ? felem_t'(1) : r[a];
  endfunction

  assign rd_a = rd(ra_a, rf);
  assign rd_b = rd(ra_b, rf);
  assign xr   = rf[R_XR];
  assign yr   = rf[R_YR];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < NREG; i++) rf[i] <= '0;
    end else if (we && wa != R_ONE) begin
      rf[wa] <= wd;
    end
  end
endmodule
