// curve_rom: the saved parameters of the two supported curves, the base point
// G = (Gx, Gy) and the coefficient b of y^2 + xy = x^3 + x^2 + b (a = 1 for
// both curves). The values are those of the NIST curves B-233 and B-283
// (FIPS 186-4). Combinational lookup by the selected curve.
// The description says the accelerator stores G and b of both curves; the
// values themselves come from the standard.
module curve_rom
  import ecc_pkg::*;
(
  input  ec_t    ec,
  output felem_t gx,
  output felem_t gy,
  output felem_t b
);
  always_comb begin
    if (ec == EC_B283) begin
      b  = 283'h27b680ac8b8596da5a4af8a19a0303fca97fd7645309fa2a581485af6263e313b79a2f5;
      gx = 283'h5f939258db7dd90e1934f8c70b0dfec2eed25b8557eac9c80e2e198f8cdbecd86b12053;
      gy = 283'h3676854fe24141cb98fe6d4b20d02b4516ff702350eddb0826779c813f0df45be8112f4;
    end else begin
      b  = 283'h066647ede6c332c7f8c0923bb58213b333b20e9ce4281fe115f7d8f90ad;
      gx = 283'h0fac9dfcbac8313bb2139f1bb755fef65bc391f8b36f8f8eb7371fd558b;
      gy = 283'h1006a08a41903350678e58528bebf8a0beff867a7ca36716f7e01f81052;
    end
  end
endmodule
