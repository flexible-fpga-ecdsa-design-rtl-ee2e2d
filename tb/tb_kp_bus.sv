// tb_kp_bus: the bus selects the write-back value: ALU result, multiplier product or one
// of the external values x, y, b. Random values, every selection.
module tb_kp_bus;
  import ecc_pkg::*;
  import tb_gf_pkg::*;
  logic clk = 0, rst_n = 0, we = 0, mul_done = 1;
  felem_t wd, alu_y, mul_c, ext_px, ext_py, ext_b;
  wb_src_t  wb_src;
  ext_sel_t ext_sel;
  int checks = 0, failures = 0;

  kp_bus dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    felem_t e;
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      alu_y = rand_elem(EC_B283); mul_c = rand_elem(EC_B283);
      ext_px = rand_elem(EC_B283); ext_py = rand_elem(EC_B283); ext_b = rand_elem(EC_B283);
      wb_src = wb_src_t'($urandom % 3);
      ext_sel = ext_sel_t'($urandom % 3);
      we = 1; mul_done = 1;
      #1;
      case (wb_src)
        WB_ALU: e = alu_y;
        WB_MUL: e = mul_c;
        default: e = (ext_sel == EXT_PX) ? ext_px : (ext_sel == EXT_PY) ? ext_py : ext_b;
      endcase
      checks++;
      if (wd !== e) begin failures++; $display("FAIL route %0d", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
