// tb_curve_rom: the stored base points must lie on their curves,
// y^2 + xy = x^3 + x^2 + b over GF(2^l), checked with the reference field
// arithmetic, and must have the standard coordinates' leading digits.
module tb_curve_rom;
  import ecc_pkg::*;
  import tb_gf_pkg::*;
  ec_t ec;
  felem_t gx, gy, b;
  int checks = 0, failures = 0;

  curve_rom dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    felem_t lhs, rhs, x2;
    for (int e = 0; e < 2; e++) begin
      ec = ec_t'(e); #1;
      x2  = ref_mul(gx, gx, ec);
      lhs = ref_mul(gy, gy, ec) ^ ref_mul(gx, gy, ec);
      rhs = ref_mul(x2, gx, ec) ^ x2 ^ b;
      checks++;
      if (lhs !== rhs) begin failures++; $display("FAIL G not on curve %0d", e); end
      checks++;
      if ((gx & ~ec_mask(ec)) != '0 || (gy & ~ec_mask(ec)) != '0 || (b & ~ec_mask(ec)) != '0) begin
        failures++; $display("FAIL value wider than the field");
      end
    end
    ec = EC_B233; #1;
    checks++; if (gx[232:200] !== 33'h0fac9dfcb) begin failures++; $display("FAIL Gx 233"); end
    ec = EC_B283; #1;
    checks++; if (gx[282:248] !== 35'h5f939258d) begin failures++; $display("FAIL Gx 283"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
