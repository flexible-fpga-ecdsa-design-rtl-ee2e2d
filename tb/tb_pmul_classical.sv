// tb_pmul_classical: the 71x71-bit partial multiplier against a
// shift-and-add carry-less product, on random and corner operands.
module tb_pmul_classical;
  import tb_gf_pkg::*;
  logic [70:0]  a, b;
  logic [140:0] p;
  int checks = 0, failures = 0;

  pmul_classical dut (.a, .b, .p);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic t(logic [70:0] x, logic [70:0] y);
    a = x; b = y; #1;
    checks++;
    if (p !== ref_clmul71(x, y)) begin failures++; $display("FAIL %h * %h", x, y); end
  endtask

  initial begin
    t('0, '1); t('1, '1); t(71'd1, 71'h5a5a); t(71'h1 << 70, 71'h1 << 70);
    for (int i = 0; i < 300; i++) t({$urandom, $urandom, $urandom}, {$urandom, $urandom, $urandom});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
