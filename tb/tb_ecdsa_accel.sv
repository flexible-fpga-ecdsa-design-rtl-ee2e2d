// tb_ecdsa_accel: end-to-end test of the accelerator through its command
// interface, at the design's only size (both curves).
//  - CMD_SEL_EC switches between B-283 and B-233 (mode switch)
//  - CMD_KG and CMD_KPUB on B-283 against known answers
//  - CMD_VERIFY (u1*G + u2*Pub) on B-283 and B-233: x_T, y_T and
//    r == x_T mod n, i.e. a complete ECDSA signature verification
//  - CMD_VERIFY with u1*G + u1*G: the unsupported doubling must raise err
// Each of these mechanisms is counted and must occur at least once. Every
// scalar-bit slot must last 54 cycles; each job must run l-1 slots.
// The design has no parameters, so this is also the full-size test.
module tb_ecdsa_accel;
  import ecc_pkg::*;
  import tb_vec_pkg::*;

  logic   clk = 0, rst_n = 0;
  logic   cmd_valid = 0, cmd_ready;
  cmd_t   cmd;
  ec_t    cmd_ec;
  felem_t k, k2, pub_x, pub_y;
  ec_t    ec_sel;
  logic   busy, done, err, slot_start, mul_start;
  felem_t x_out, y_out;
  int     checks = 0, failures = 0, cyc = 0;
  int     n_sel = 0, n_kg = 0, n_kpub = 0, n_verify = 0, n_err = 0;
  int     slots = 0, muls = 0, bad_slot = 0, last_slot = -1;

  ecdsa_accel dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (mul_start) muls <= muls + 1;
    if (!busy) last_slot <= -1;
    else if (slot_start) begin
      if (last_slot >= 0 && cyc - last_slot != SLOT_CYCLES) bad_slot <= bad_slot + 1;
      last_slot <= cyc;
      slots     <= slots + 1;
    end
  end

  task automatic check(string what, felem_t got, felem_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  task automatic issue(cmd_t c);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(negedge clk) cmd_valid = 0;
    while (!done) @(negedge clk);
    case (c)
      CMD_SEL_EC: n_sel++;
      CMD_KG:     n_kg++;
      CMD_KPUB:   n_kpub++;
      default:    n_verify++;
    endcase
    if (err) n_err++;
  endtask

  function automatic felem_t mod_n(felem_t x, felem_t n);
    while (x >= n) x = x - n;
    return x;
  endfunction

  task automatic expect_slots(int n, string what);
    checks++;
    if (slots != n) begin failures++; $display("FAIL %s: %0d slots, expected %0d", what, slots, n); end
    slots = 0;
  endtask

  initial begin
    int t0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // select B-283
    cmd_ec = EC_B283;
    issue(CMD_SEL_EC);
    checks++; if (ec_sel != EC_B283) begin failures++; $display("FAIL ec_sel"); end
    // k*G
    k = B283_K; t0 = cyc;
    issue(CMD_KG);
    $display("B-283 k*G: %0d cycles", cyc - t0);
    check("B283 kG x", x_out, B283_KGX);
    check("B283 kG y", y_out, B283_KGY);
    expect_slots(282, "B283 kG");
    // k*Pub
    k = B283_K2; pub_x = B283_PUBX; pub_y = B283_PUBY;
    issue(CMD_KPUB);
    check("B283 kPub x", x_out, B283_KPX);
    check("B283 kPub y", y_out, B283_KPY);
    expect_slots(282, "B283 kPub");
    // signature verification
    k = B283_U1; k2 = B283_U2; t0 = cyc; muls = 0;
    issue(CMD_VERIFY);
    $display("B-283 verify: %0d cycles, %0d field products", cyc - t0, muls);
    check("B283 T x", x_out, B283_TX);
    check("B283 r == x_T mod n", mod_n(x_out, B283_N), B283_R);
    checks++; if (err) begin failures++; $display("FAIL unexpected err"); end
    expect_slots(2 * 282, "B283 verify");
    // switch to B-233 and verify there
    cmd_ec = EC_B233;
    issue(CMD_SEL_EC);
    checks++; if (ec_sel != EC_B233) begin failures++; $display("FAIL ec_sel"); end
    k = B233_U1; k2 = B233_U2; pub_x = B233_PUBX; pub_y = B233_PUBY; t0 = cyc;
    issue(CMD_VERIFY);
    $display("B-233 verify: %0d cycles", cyc - t0);
    check("B233 T x", x_out, B233_TX);
    check("B233 T y", y_out, B233_TY);
    check("B233 r == x_T mod n", mod_n(x_out, B233_N), B233_R);
    expect_slots(2 * 232, "B233 verify");
    // degenerate: u1*G + u1*G (Pub = G)
    k = B233_K; k2 = B233_K;
    pub_x = 283'h0fac9dfcbac8313bb2139f1bb755fef65bc391f8b36f8f8eb7371fd558b;
    pub_y = 283'h1006a08a41903350678e58528bebf8a0beff867a7ca36716f7e01f81052;
    issue(CMD_VERIFY);
    checks++; if (!err) begin failures++; $display("FAIL err not raised"); end
    expect_slots(2 * 232, "B233 degenerate");
    // every mechanism must have happened
    $display("mode switches %0d, kG %0d, kPub %0d, verify %0d, err %0d, bad slots %0d",
             n_sel, n_kg, n_kpub, n_verify, n_err, bad_slot);
    checks++; if (n_sel < 2 || n_kg < 1 || n_kpub < 1 || n_verify < 2 || n_err < 1) begin
      failures++; $display("FAIL a mechanism never happened");
    end
    // the only slot distance that is not 54 cycles is the gap between the two
    // jobs of a verification
    checks++; if (bad_slot != n_verify) begin failures++; $display("FAIL slot length"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
