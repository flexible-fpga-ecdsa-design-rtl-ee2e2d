// tb_gf_sqr: field squaring on both curves against the bit-serial reference
// product a*a mod f(t), on random elements and on t^(l-1) (largest spread).
module tb_gf_sqr;
  import ecc_pkg::*;
  import tb_gf_pkg::*;
  ec_t ec;
  felem_t a, y;
  int checks = 0, failures = 0;

  gf_sqr dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 200; n++) begin
      ec = ec_t'(n % 2);
      a = (n < 2) ? felem_t'(1) << (ec_len(ec) - 1) : (n < 4) ? ec_mask(ec) : rand_elem(ec);
      #1;
      checks++;
      if (y !== ref_mul(a, a, ec)) begin failures++; $display("FAIL sqr %h", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
