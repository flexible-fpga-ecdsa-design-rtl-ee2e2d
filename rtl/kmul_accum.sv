// kmul_accum: "accumulation with partial reduction" and the output register
// of the flexible field multiplier.
// Karatsuba recombination: with P0..P8 the nine partial products of
// kmul_operands and s = 71, the full product is
//   A*B = sum_k P_k * (sum of t^(s*j) for j in SHIFTS(k)), with
//   P0:{0,1,2,3} P1:{1,2,3,4} P2:{1,3} P3:{2,3,4,5} P4:{3,4,5,6}
//   P5:{3,5}     P6:{2,3}     P7:{3,4} P8:{3}
// (two levels of 2-segment Karatsuba expanded into one plan). In each clock
// cycle the incoming 141-bit partial product is placed at its shifts, added
// to the register and the sum is reduced modulo f(t) of the selected curve,
// so the register always holds a reduced field element and after the ninth
// step it holds A*B mod f(t). The register is the multiplier's output
// register: it keeps the result until the first step of the next product,
// which overwrites it instead of adding to it (first = 1).
// Accumulating one partial product per cycle with reduction in every cycle
// follows the design description; reducing fully (not partially) is this
// design's choice. Synchronous active-low reset.
module kmul_accum
  import ecc_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  ec_t        ec,
  input  logic       en,      // accumulate pp this cycle
  input  logic       first,   // step 0: start a new product
  input  logic [3:0] step,
  input  pprod_t     pp,
  output felem_t     acc
);
  function automatic logic [6:0] shifts(logic [3:0] s);
    case (s)
      4'd0: return 7'b0001111;
      4'd1: return 7'b0011110;
      4'd2: return 7'b0001010;
      4'd3: return 7'b0111100;
      4'd4: return 7'b1111000;
      4'd5: return 7'b0101000;
      4'd6: return 7'b0001100;
      4'd7: return 7'b0011000;
      4'd8: return 7'b0001000;
      default: return 7'b0000000;
    endcase
  endfunction

  wide_t  placed;
  felem_t acc_next;

  always_comb begin
    logic [6:0] m;
    m      = shifts(step);
    placed = first ? wide_t'(0) : wide_t'(acc);
    for (int unsigned j = 0; j < 7; j++)
      if (m[j]) placed ^= wide_t'(pp) << (SEG*j);
    acc_next = gf_reduce(placed, ec);
  end

  always_ff @(posedge clk) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= acc_next;
  end
endmodule
