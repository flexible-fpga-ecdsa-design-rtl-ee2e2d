// tb_kp_core: end-to-end test of the kP core on both curves.
//  1. k*G on B-233 and B-283 against known answers; each scalar-bit slot must
//     last 54 cycles and contain exactly 6 field products.
//  2. k2*Pub, stored; then a second job with add_prev computes
//     u1*G + u2*Pub (B-233) and the result is checked against the known x_T,
//     y_T and r = x_T mod n.
//  3. a degenerate addition (k*G + k*G through add_prev) must raise err.
module tb_kp_core;
  import ecc_pkg::*;
  import tb_vec_pkg::*;

  logic   clk = 0, rst_n = 0;
  ec_t    ec;
  logic   start = 0, add_prev = 0;
  felem_t k, px, py, b;
  logic   busy, done, err, slot_start, mul_start;
  felem_t xr, yr;
  int     checks = 0, failures = 0;
  int     cyc = 0;

  kp_core dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // slot timing monitor
  int last_slot = -1, slot_len_bad = 0, slots = 0, muls_in_slot = 0, slot_mul_bad = 0;
  always @(posedge clk) if (rst_n) begin
    if (!busy) last_slot <= -1;
    else if (slot_start) begin
      if (last_slot >= 0) begin
        if (cyc - last_slot != SLOT_CYCLES) slot_len_bad++;
        if (muls_in_slot != 6) slot_mul_bad++;
      end
      last_slot    <= cyc;
      slots        <= slots + 1;
      muls_in_slot <= mul_start ? 1 : 0;
    end else if (mul_start) muls_in_slot <= muls_in_slot + 1;
  end

  task automatic check(string what, felem_t got, felem_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  task automatic run(ec_t e, felem_t kk, felem_t x, felem_t y, logic addp);
    felem_t gx, gy, bb;
    ec = e; k = kk; px = x; py = y; add_prev = addp;
    b = (e == EC_B283) ? 283'h27b680ac8b8596da5a4af8a19a0303fca97fd7645309fa2a581485af6263e313b79a2f5
                       : 283'h066647ede6c332c7f8c0923bb58213b333b20e9ce4281fe115f7d8f90ad;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
  endtask

  localparam felem_t G233X = 283'h0fac9dfcbac8313bb2139f1bb755fef65bc391f8b36f8f8eb7371fd558b;
  localparam felem_t G233Y = 283'h1006a08a41903350678e58528bebf8a0beff867a7ca36716f7e01f81052;
  localparam felem_t G283X = 283'h5f939258db7dd90e1934f8c70b0dfec2eed25b8557eac9c80e2e198f8cdbecd86b12053;
  localparam felem_t G283Y = 283'h3676854fe24141cb98fe6d4b20d02b4516ff702350eddb0826779c813f0df45be8112f4;

  function automatic felem_t mod_n(felem_t x, felem_t n);
    while (x >= n) x = x - n;
    return x;
  endfunction

  initial begin
    int t0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 1. k*G, B-233
    t0 = cyc;
    run(EC_B233, B233_K, G233X, G233Y, 0);
    $display("B-233 kG: %0d cycles, %0d slots", cyc - t0, slots);
    check("B233 kG x", xr, B233_KGX);
    check("B233 kG y", yr, B233_KGY);
    checks++; if (err) begin failures++; $display("FAIL unexpected err"); end
    checks++; if (slots != 232) begin failures++; $display("FAIL slots %0d", slots); end
    // 1. k*G, B-283
    slots = 0; t0 = cyc;
    run(EC_B283, B283_K, G283X, G283Y, 0);
    $display("B-283 kG: %0d cycles, %0d slots", cyc - t0, slots);
    check("B283 kG x", xr, B283_KGX);
    check("B283 kG y", yr, B283_KGY);
    checks++; if (slots != 282) begin failures++; $display("FAIL slots %0d", slots); end
    // 2. verification on B-233: u1*G, then u2*Pub + previous
    run(EC_B233, B233_U1, G233X, G233Y, 0);
    run(EC_B233, B233_U2, B233_PUBX, B233_PUBY, 1);
    check("B233 T x", xr, B233_TX);
    check("B233 T y", yr, B233_TY);
    check("B233 r", mod_n(xr, B233_N), B233_R);
    checks++; if (err) begin failures++; $display("FAIL unexpected err"); end
    // 3. P + P through add_prev is not supported and must flag err
    run(EC_B233, B233_K, G233X, G233Y, 0);
    run(EC_B233, B233_K, G233X, G233Y, 1);
    checks++; if (!err) begin failures++; $display("FAIL err not raised"); end
    checks++; if (slot_len_bad != 0) begin failures++; $display("FAIL %0d slots not 54 cycles", slot_len_bad); end
    checks++; if (slot_mul_bad != 0) begin failures++; $display("FAIL %0d slots without 6 products", slot_mul_bad); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
