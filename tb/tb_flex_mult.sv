// tb_flex_mult: the flexible field multiplier against the bit-serial
// reference product, on random and corner operands of both curves.
// Checks the latency (done exactly 10 cycles after start is sampled: load
// plus 9 steps) and back-to-back operation (a new start in the ninth step,
// one product every 9 cycles). The operand inputs change while a product
// runs; only the values present at start may count.
module tb_flex_mult;
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

  task automatic chk(felem_t got, felem_t exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask

  // single product with latency check
  task automatic one(felem_t x, felem_t y);
    int t0, lat;
    @(negedge clk); a = x; b = y; start = 1;
    t0 = cyc;
    @(negedge clk); start = 0;
    a = rand_elem(ec); b = rand_elem(ec);   // inputs change while it works
    while (!done) @(negedge clk);
    lat = cyc - t0;
    checks++;
    if (lat != 10) begin failures++; $display("FAIL latency %0d", lat); end
    chk(c, ref_mul(x, y, ec), "product");
  endtask

  initial begin
    felem_t xs [4], ys [4], ex [4];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int e = 0; e < 2; e++) begin
      ec = ec_t'(e);
      one(felem_t'(1), felem_t'(1));
      one(ec_mask(ec), ec_mask(ec));
      one(felem_t'(1) << (ec_len(ec) - 1), felem_t'(1) << (ec_len(ec) - 1));
      for (int i = 0; i < 40; i++) one(rand_elem(ec), rand_elem(ec));
      // back to back: four products, start given in the last step
      for (int i = 0; i < 4; i++) begin
        xs[i] = rand_elem(ec); ys[i] = rand_elem(ec); ex[i] = ref_mul(xs[i], ys[i], ec);
      end
      @(negedge clk);
      for (int i = 0; i < 4; i++) begin
        a = xs[i]; b = ys[i]; start = 1;
        checks++; if (!ready) begin failures++; $display("FAIL not ready back to back"); end
        @(negedge clk); start = 0;
        a = rand_elem(ec); b = rand_elem(ec);
        if (i < 3) repeat (8) @(negedge clk);
      end
      repeat (12) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // done-pulse monitor for the back-to-back part: each done must carry the
  // reference product of the operands loaded 10 cycles earlier
  felem_t hist_a [16], hist_b [16];
  int     hist_t [16];
  int     wr = 0, rd = 0;
  always @(posedge clk) if (rst_n) begin
    if (start && ready) begin
      hist_a[wr % 16] <= a; hist_b[wr % 16] <= b; hist_t[wr % 16] <= cyc; wr <= wr + 1;
    end
    if (done && rd < wr) begin
      checks++;
      if (c !== ref_mul(hist_a[rd % 16], hist_b[rd % 16], ec) || cyc - hist_t[rd % 16] != 10) begin
        failures++; $display("FAIL stream product %0d", rd);
      end
      rd <= rd + 1;
    end
  end
endmodule
