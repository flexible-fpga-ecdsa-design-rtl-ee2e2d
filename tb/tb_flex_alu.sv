// tb_flex_alu: the three ALU operations on both curves: PASS returns a, ADD
// returns a + b (checked through (a + b) + b = a and bitwise), SQR returns
// a*a mod f(t) from the bit-serial reference.
module tb_flex_alu;
  import ecc_pkg::*;
  import tb_gf_pkg::*;
  alu_op_t op;
  ec_t     ec;
  felem_t  a, b, y;
  int checks = 0, failures = 0;

  flex_alu dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic c(felem_t exp, string what);
    checks++;
    if (y !== exp) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    felem_t s;
    for (int n = 0; n < 100; n++) begin
      ec = ec_t'(n % 2);
      a = rand_elem(ec); b = rand_elem(ec);
      op = ALU_PASS; #1; c(a, "pass");
      op = ALU_ADD;  #1;
      for (int i = 0; i < 283; i++) s[i] = a[i] != b[i];
      c(s, "add");
      op = ALU_SQR;  #1; c(ref_mul(a, a, ec), "sqr");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
