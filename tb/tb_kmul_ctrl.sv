// tb_kmul_ctrl: the multiplier controller. After a start the steps 0..8 must
// follow in the next nine cycles with en = 1 and first only on step 0, done
// must come one cycle after step 8, ready must be high only when idle or in
// step 8, and a start in step 8 must restart at step 0 without a gap.
module tb_kmul_ctrl;
  logic clk = 0, rst_n = 0, start = 0;
  logic ready, load, en, first, done;
  logic [3:0] step;
  int checks = 0, failures = 0;

  kmul_ctrl dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic c(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    c(ready && !en && !done, "idle");
    for (int rep = 0; rep < 3; rep++) begin
      start = 1; #1; c(load, "load");
      @(negedge clk); start = 0;
      for (int s = 0; s < 9; s++) begin
        c(en && step == 4'(s) && first == (s == 0), $sformatf("step %0d", s));
        c(ready == (s == 8), "ready");
        c(!done || s == 0, "done early");
        if (s == 8 && rep == 2) begin
          start = ready; #1; c(load, "back-to-back load");
        end
        @(negedge clk);
        start = 0;
      end
      c(done, "done");
      if (rep == 2) begin
        c(en && step == 0 && first, "restart without gap");
      end else begin
        c(!en, "idle after");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
