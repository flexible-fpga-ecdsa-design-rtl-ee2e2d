// tb_kp_regfile: writes random values to all 15 registers in random order and
// reads them back through both ports against a shadow copy; R_ONE must read
// as 1 and ignore writes; xr/yr must show R_XR/R_YR; we = 0 must not write.
module tb_kp_regfile;
  import ecc_pkg::*;
  import tb_gf_pkg::*;
  logic clk = 0, rst_n = 0, we = 0;
  reg_t ra_a, ra_b, wa;
  felem_t rd_a, rd_b, wd, xr, yr;
  felem_t shadow [16];
  int checks = 0, failures = 0;

  kp_regfile dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) shadow[i] = '0;
    shadow[15] = felem_t'(1);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      we = ($urandom % 4) != 0;
      wa = reg_t'($urandom % 16);
      wd = rand_elem(EC_B283);
      ra_a = reg_t'($urandom % 16);
      ra_b = reg_t'($urandom % 16);
      #1;
      checks++;
      if (rd_a !== shadow[ra_a] || rd_b !== shadow[ra_b]) begin
        failures++; $display("FAIL read %0d/%0d", ra_a, ra_b);
      end
      checks++;
      if (xr !== shadow[R_XR] || yr !== shadow[R_YR]) begin failures++; $display("FAIL xr/yr"); end
      @(negedge clk);
      if (we && wa != R_ONE) shadow[wa] = wd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
