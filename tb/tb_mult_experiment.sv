// tb_mult_experiment: the multiplier-only experiment of the side-channel
// evaluation, run in simulation. One experiment is four back-to-back
// products with one shared and otherwise different operands:
//   mult1 = a*b, mult2 = c*d, mult3 = a*e, mult4 = f*g
// repeated 20 times with 233-bit (B-233) and 283-bit (B-283) operands. Every
// product is checked against the reference and must take 9 cycles.
// As an illustration only, the number of toggling bits of the accumulator
// register per cycle serves as a crude activity profile (9 values per
// product), and Pearson coefficients K1 (mult1, mult3: common operand),
// K2 (mult2, mult4), K3 (mult1, mult2) and K4 (mult1, mult4) are printed.
// They are not checked: they are no substitute for measured traces.
module tb_mult_experiment;
  import ecc_pkg::*;
  import tb_gf_pkg::*;

  logic   clk = 0, rst_n = 0;
  ec_t    ec;
  logic   start = 0, ready, done;
  felem_t a, b, c;
  int     checks = 0, failures = 0, cyc = 0;

  flex_mult dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // activity profile: toggles of the output register in each step
  real    prof [4][9];
  felem_t prev_c;
  always @(posedge clk) prev_c <= c;

  function automatic real pearson(real x [9], real y [9]);
    real mx = 0, my = 0, sxy = 0, sxx = 0, syy = 0;
    for (int i = 0; i < 9; i++) begin mx += x[i] / 9.0; my += y[i] / 9.0; end
    for (int i = 0; i < 9; i++) begin
      sxy += (x[i] - mx) * (y[i] - my);
      sxx += (x[i] - mx) ** 2;
      syy += (y[i] - my) ** 2;
    end
    return (sxx == 0 || syy == 0) ? 0.0 : sxy / $sqrt(sxx * syy);
  endfunction

  initial begin
    felem_t va, vb, vc, vd, ve, vf, vg;
    felem_t xa [4], xb [4];
    int t0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int e = 0; e < 2; e++) begin
      ec = ec_t'(e);
      for (int n = 0; n < 20; n++) begin
        va = rand_elem(ec); vb = rand_elem(ec); vc = rand_elem(ec); vd = rand_elem(ec);
        ve = rand_elem(ec); vf = rand_elem(ec); vg = rand_elem(ec);
        xa = '{va, vc, va, vf};
        xb = '{vb, vd, ve, vg};
        @(negedge clk);
        for (int m = 0; m < 4; m++) begin
          a = xa[m]; b = xb[m]; start = 1;
          t0 = cyc;
          @(negedge clk); start = 0;
          for (int s = 0; s < 8; s++) begin
            prof[m][s] = $countones(c ^ prev_c);
            @(negedge clk);
          end
          prof[m][8] = $countones(c ^ prev_c);
        end
        // wait for the last product
        @(negedge clk);
        while (!done) @(negedge clk);
        @(negedge clk);
        if (n < 2 || n == 19)
          $display("l=%0d experiment %0d: K1=%5.2f K2=%5.2f K3=%5.2f K4=%5.2f", ec_len(ec), n,
                   pearson(prof[0], prof[2]), pearson(prof[1], prof[3]),
                   pearson(prof[0], prof[1]), pearson(prof[0], prof[3]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // every product: value and 10-cycle start-to-result latency (9 steps)
  felem_t qa [16], qb [16];
  int     qt [16];
  int     wr = 0, rd = 0;
  always @(posedge clk) if (rst_n) begin
    if (start && ready) begin
      qa[wr % 16] <= a; qb[wr % 16] <= b; qt[wr % 16] <= cyc; wr <= wr + 1;
    end
    if (done && rd < wr) begin
      checks++;
      if (c !== ref_mul(qa[rd % 16], qb[rd % 16], ec) || cyc - qt[rd % 16] != 10) begin
        failures++; $display("FAIL product %0d", rd);
      end
      rd <= rd + 1;
    end
  end

  a_back_to_back: assert property (@(posedge clk) disable iff (!rst_n) start |-> ready);
endmodule
