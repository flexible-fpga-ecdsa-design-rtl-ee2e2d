// tb_gf_add: field addition against the definition (coefficient-wise sum
// modulo 2, computed bit by bit here), plus x + x = 0 and x + 0 = x.
module tb_gf_add;
  import ecc_pkg::*;
  import tb_gf_pkg::*;
  felem_t a, b, y;
  int checks = 0, failures = 0;

  gf_add dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    felem_t e;
    for (int n = 0; n < 200; n++) begin
      a = rand_elem(ec_t'(n % 2));
      b = (n % 5 == 0) ? a : (n % 7 == 0) ? '0 : rand_elem(ec_t'(n % 2));
      #1;
      for (int i = 0; i < 283; i++) e[i] = (a[i] + b[i]) % 2;
      checks++;
      if (y !== e) begin failures++; $display("FAIL %h + %h", a, b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
