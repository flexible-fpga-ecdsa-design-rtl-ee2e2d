// tb_kp_ctrl: the controller alone, driving a behavioural datapath written
// here: a register array, ALU operations and a 9-cycle multiplier model built
// on the reference field arithmetic, with the product visible in the cycle
// after the ninth step as in the real multiplier. The controller must
// compute k*G (B-233) and u1*G + u2*Pub (B-283) correctly, issue 6 products
// per 54-cycle slot with the b product 3rd (operand R_B) and the x product
// 5th (operand R_X) and neither in the others, never issue a product while one is in its first eight
// steps, and only write back products that are valid.
module tb_kp_ctrl;
  import ecc_pkg::*;
  import tb_gf_pkg::*;
  import tb_vec_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, add_prev = 0;
  ec_t ec;
  felem_t k;
  reg_t ra_a, ra_b, wa;
  logic we, mul_start, mul_done, wd_zero, busy, done, err, slot_start;
  wb_src_t wb_src;
  ext_sel_t ext_sel;
  alu_op_t alu_op;
  int checks = 0, failures = 0, cyc = 0;

  kp_ctrl dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // behavioural datapath
  felem_t rf [16];
  felem_t px, py, bb;
  felem_t m_a, m_b, m_c;
  int     m_cnt = 0;          // remaining steps of the running product
  felem_t opa, opb, alu_y, wd;
  int     bad_issue = 0, bad_wb = 0;

  function automatic felem_t rdr(reg_t r);
    return (r == R_ONE) ? felem_t'(1) : rf[r];
  endfunction

  always_comb begin
    opa = rdr(ra_a); opb = rdr(ra_b);
    case (alu_op)
      ALU_ADD: alu_y = opa ^ opb;
      ALU_SQR: alu_y = ref_mul(opa, opa, ec);
      default: alu_y = opa;
    endcase
    case (wb_src)
      WB_MUL:  wd = m_c;
      WB_EXT:  wd = (ext_sel == EXT_PX) ? px : (ext_sel == EXT_PY) ? py : bb;
      default: wd = alu_y;
    endcase
    wd_zero = (wd == '0);
  end

  always @(posedge clk) begin
    mul_done <= (m_cnt == 1);
    if (m_cnt == 1) m_c <= ref_mul(m_a, m_b, ec);
    if (mul_start) begin
      if (m_cnt > 1) bad_issue++;
      m_a <= opa; m_b <= opb; m_cnt <= 9;
    end else if (m_cnt > 0) m_cnt <= m_cnt - 1;
    if (we && wb_src == WB_MUL && !mul_done) bad_wb++;
    if (we && wa != R_ONE) rf[wa] <= wd;
  end

  // product order inside a slot
  int mul_idx = 0, bad_order = 0, slots = 0;
  always @(posedge clk) if (rst_n && mul_start) begin
    if (slot_start) mul_idx = 0;
    if (dut.state == 3'd3) begin  // ladder phase
      if (mul_idx == 2 && ra_a != R_B) bad_order++;
      if (mul_idx == 4 && ra_a != R_X) bad_order++;
      // the 1st, 2nd, 4th and 6th products use neither b nor x
      if (mul_idx inside {0, 1, 3, 5} && (ra_a inside {R_B, R_X} || ra_b inside {R_B, R_X})) bad_order++;
      if (mul_idx == 0) slots++;
    end
    mul_idx++;
  end

  task automatic job(ec_t e, felem_t kk, felem_t x, felem_t y, logic addp);
    ec = e; k = kk; px = x; py = y; add_prev = addp;
    bb = (e == EC_B283) ? 283'h27b680ac8b8596da5a4af8a19a0303fca97fd7645309fa2a581485af6263e313b79a2f5
                        : 283'h066647ede6c332c7f8c0923bb58213b333b20e9ce4281fe115f7d8f90ad;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
  endtask

  task automatic c(felem_t got, felem_t exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int i = 0; i < 16; i++) rf[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    job(EC_B233, B233_K, 283'h0fac9dfcbac8313bb2139f1bb755fef65bc391f8b36f8f8eb7371fd558b,
        283'h1006a08a41903350678e58528bebf8a0beff867a7ca36716f7e01f81052, 0);
    c(rf[R_XR], B233_KGX, "B233 kG x");
    c(rf[R_YR], B233_KGY, "B233 kG y");
    checks++; if (slots != 232) begin failures++; $display("FAIL slots %0d", slots); end
    job(EC_B283, B283_U1, 283'h5f939258db7dd90e1934f8c70b0dfec2eed25b8557eac9c80e2e198f8cdbecd86b12053,
        283'h3676854fe24141cb98fe6d4b20d02b4516ff702350eddb0826779c813f0df45be8112f4, 0);
    job(EC_B283, B283_U2, B283_PUBX, B283_PUBY, 1);
    c(rf[R_XR], B283_TX, "B283 T x");
    checks++; if (err) begin failures++; $display("FAIL err"); end
    checks++; if (bad_order != 0) begin failures++; $display("FAIL product order %0d", bad_order); end
    checks++; if (bad_issue != 0) begin failures++; $display("FAIL product issued while busy"); end
    checks++; if (bad_wb != 0) begin failures++; $display("FAIL invalid write-back"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
