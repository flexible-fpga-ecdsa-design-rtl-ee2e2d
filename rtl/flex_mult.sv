// flex_mult: the flexible field multiplier, C(t) = A(t)*B(t) mod f(t) for
// GF(2^233) (B-233) or GF(2^283) (B-283), selected by ec.
// Structure: two 283-bit input registers, the partial-operand calculation
// (kmul_operands), one 71x71-bit classical partial multiplier
// (pmul_classical), the accumulator with reduction in every cycle whose
// register is the output register (kmul_accum), and the multiplier
// controller (kmul_ctrl). It follows the 4-segment Karatsuba method: one of
// the nine partial products is formed and accumulated per clock cycle.
// Timing: start (with a, b) sampled at edge 0; the nine steps run in the next
// nine cycles; done is high in the cycle after, with c = a*b mod f. start may
// be given again in the ninth step (ready = 1) for back-to-back products, one
// every 9 cycles. c holds its value until the next product begins.
// Operands must be reduced (bits >= l zero); ec must stay stable during a product.
// The block structure, the 9-cycle product and the 71x71 classical partial
// multiplier follow the design description; the back-to-back handshake
// is this design's choice, needed for the 54-cycle ladder slot.
module flex_mult
  import ecc_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  ec_t    ec,
  input  logic   start,
  input  felem_t a,
  input  felem_t b,
  output logic   ready,
  output logic   done,
  output felem_t c
);
  felem_t     ra, rb;       // input registers
  logic       load, en, first;
  logic [3:0] step;
  seg_t       pa, pb;
  pprod_t     pp;

  kmul_ctrl u_ctrl (
    .clk, .rst_n, .start, .ready, .load, .en, .first, .step, .done
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ra <= '0;
      rb <= '0;
    end else if (load) begin
      ra <= a;
      rb <= b;
    end
  end

  kmul_operands u_ops (.a(ra), .b(rb), .step, .pa, .pb);
  pmul_classical #(.W(SEG)) u_pmul (.a(pa), .b(pb), .p(pp));
  kmul_accum u_acc (.clk, .rst_n, .ec, .en, .first, .step, .pp, .acc(c));
endmodule
