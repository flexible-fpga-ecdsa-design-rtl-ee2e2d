// tb_kmul_operands: the partial operands of the nine Karatsuba steps,
// checked against the segment sums of the plan
// (A0, A1, A0+A1, A2, A3, A2+A3, A0+A2, A1+A3, A0+A1+A2+A3), and a check
// that the nine carry-less products recombined with the shifts of the plan
// give the full product.
module tb_kmul_operands;
  import ecc_pkg::*;
  import tb_gf_pkg::*;
  felem_t     a, b;
  logic [3:0] step;
  seg_t       pa, pb;
  int checks = 0, failures = 0;

  kmul_operands dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic seg_t sg(felem_t x, int i);
    logic [283:0] xx;
    xx = {1'b0, x};
    return xx[i*71 +: 71];
  endfunction

  initial begin
    seg_t ea, eb;
    logic [567:0] full, expct;
    int sh [9][$] = '{'{0,1,2,3}, '{1,2,3,4}, '{1,3}, '{2,3,4,5}, '{3,4,5,6}, '{3,5}, '{2,3}, '{3,4}, '{3}};
    for (int n = 0; n < 30; n++) begin
      a = rand_elem(EC_B283); b = rand_elem(EC_B283);
      full = '0;
      expct = '0;
      for (int i = 0; i < 283; i++) if (b[i]) expct ^= (568'(a) << i);
      for (int s = 0; s < 9; s++) begin
        step = 4'(s); #1;
        case (s)
          0: begin ea = sg(a,0); eb = sg(b,0); end
          1: begin ea = sg(a,1); eb = sg(b,1); end
          2: begin ea = sg(a,0)^sg(a,1); eb = sg(b,0)^sg(b,1); end
          3: begin ea = sg(a,2); eb = sg(b,2); end
          4: begin ea = sg(a,3); eb = sg(b,3); end
          5: begin ea = sg(a,2)^sg(a,3); eb = sg(b,2)^sg(b,3); end
          6: begin ea = sg(a,0)^sg(a,2); eb = sg(b,0)^sg(b,2); end
          7: begin ea = sg(a,1)^sg(a,3); eb = sg(b,1)^sg(b,3); end
          default: begin ea = sg(a,0)^sg(a,1)^sg(a,2)^sg(a,3); eb = sg(b,0)^sg(b,1)^sg(b,2)^sg(b,3); end
        endcase
        checks++;
        if (pa !== ea || pb !== eb) begin failures++; $display("FAIL step %0d", s); end
        foreach (sh[s][j]) full ^= 568'(ref_clmul71(pa, pb)) << (71 * sh[s][j]);
      end
      checks++;
      if (full !== expct) begin failures++; $display("FAIL recombination"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
