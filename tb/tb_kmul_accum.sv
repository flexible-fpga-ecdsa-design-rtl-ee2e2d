// tb_kmul_accum: the accumulator is fed the nine partial products of random
// operand pairs (formed here from the segment sums with a shift-and-add
// carry-less product) and must end with A*B mod f(t) of the selected curve;
// a second product overwrites the first (first = 1), and en = 0 holds it.
module tb_kmul_accum;
  import ecc_pkg::*;
  import tb_gf_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, first = 0;
  ec_t  ec;
  logic [3:0] step;
  pprod_t pp;
  felem_t acc;
  int checks = 0, failures = 0;

  kmul_accum dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic seg_t sg(felem_t x, int i);
    logic [283:0] xx;
    xx = {1'b0, x};
    return xx[i*71 +: 71];
  endfunction

  function automatic seg_t comb(felem_t x, int s);
    case (s)
      0: return sg(x,0);
      1: return sg(x,1);
      2: return sg(x,0)^sg(x,1);
      3: return sg(x,2);
      4: return sg(x,3);
      5: return sg(x,2)^sg(x,3);
      6: return sg(x,0)^sg(x,2);
      7: return sg(x,1)^sg(x,3);
      default: return sg(x,0)^sg(x,1)^sg(x,2)^sg(x,3);
    endcase
  endfunction

  initial begin
    felem_t a, b, held;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      ec = ec_t'(n % 2);
      a = rand_elem(ec); b = rand_elem(ec);
      for (int s = 0; s < 9; s++) begin
        en = 1; first = (s == 0); step = 4'(s);
        pp = ref_clmul71(comb(a, s), comb(b, s));
        @(negedge clk);
      end
      en = 0; first = 0;
      checks++;
      if (acc !== ref_mul(a, b, ec)) begin failures++; $display("FAIL product %0d", n); end
      held = acc;
      repeat (3) @(negedge clk);
      checks++;
      if (acc !== held) begin failures++; $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
