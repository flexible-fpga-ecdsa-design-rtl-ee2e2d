// kmul_ctrl: controller of the flexible field multiplier. A start request is
// accepted when the multiplier is idle or in the last of its nine steps, so
// products can follow each other without a gap (one product every 9 cycles).
// Timing: start sampled high at edge 0 loads the input registers; steps 0..8
// run in the nine following cycles (en = 1); done is high for one cycle after
// the ninth step, while the output register holds the product. A start in the
// last step begins the next product right away.
// The description names the multiplier controller only; this counter and
// its back-to-back handshake are this design's own. Synchronous active-low
// reset.
module kmul_ctrl
  import ecc_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  output logic       ready,   // a start is accepted in this cycle
  output logic       load,    // load the input registers
  output logic       en,      // a partial product is accumulated
  output logic       first,   // step 0
  output logic [3:0] step,
  output logic       done     // product valid in the output register
);
  logic active;

  assign ready = !active || (step == 4'(NPP-1));
  assign load  = start && ready;
  assign en    = active;
  assign first = active && (step == '0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active <= 1'b0;
      step   <= '0;
      done   <= 1'b0;
    end else begin
      done <= active && (step == 4'(NPP-1));
      if (load) begin
        active <= 1'b1;
        step   <= '0;
      end else if (active) begin
        if (step == 4'(NPP-1)) active <= 1'b0;
        else                   step   <= step + 4'd1;
      end
    end
  end

  // a start must only be issued when it is accepted
  a_start_ready: assert property (@(posedge clk) disable iff (!rst_n) start |-> ready);
endmodule
