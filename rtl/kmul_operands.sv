// kmul_operands: "calculation of partial operands" of the flexible field
// multiplier. The 283-bit operands A(t) and B(t) are cut into four 71-bit
// segments A3..A0 and B3..B0 (A = A3 t^213 + A2 t^142 + A1 t^71 + A0). The
// 4-segment Karatsuba formula needs nine partial products; for step s this
// block outputs the operand pair of product s:
//   s: 0    1    2      3    4    5      6      7      8
//      A0   A1   A0+A1  A2   A3   A2+A3  A0+A2  A1+A3  A0+A1+A2+A3
// (same for B). The segmentation is fixed at 71 bits for both curves; a
// B-233 operand simply has zero bits above 232. The order of the nine steps
// is this design's choice. Combinational.
// The 4-segment Karatsuba method and the 71-bit partial operands follow the
// design description; the published plan itself is not given there.
module kmul_operands
  import ecc_pkg::*;
(
  input  felem_t      a,
  input  felem_t      b,
  input  logic [3:0]  step,
  output seg_t        pa,
  output seg_t        pb
);
  logic [4*SEG-1:0] ax, bx;
  seg_t [3:0] as, bs;

  // which segments are summed in each step, bit i = segment i
  function automatic logic [3:0] seg_set(logic [3:0] s);
    case (s)
      4'd0: return 4'b0001;
      4'd1: return 4'b0010;
      4'd2: return 4'b0011;
      4'd3: return 4'b0100;
      4'd4: return 4'b1000;
      4'd5: return 4'b1100;
      4'd6: return 4'b0101;
      4'd7: return 4'b1010;
      4'd8: return 4'b1111;
      default: return 4'b0000;
    endcase
  endfunction

  always_comb begin
    logic [3:0] m;
    ax = {1'b0, a};
    bx = {1'b0, b};
    for (int unsigned i = 0; i < 4; i++) begin
      as[i] = ax[i*SEG +: SEG];
      bs[i] = bx[i*SEG +: SEG];
    end
    m  = seg_set(step);
    pa = '0;
    pb = '0;
    for (int unsigned i = 0; i < 4; i++) begin
      if (m[i]) begin
        pa ^= as[i];
        pb ^= bs[i];
      end
    end
  end
endmodule
