// tb_gf_pkg: reference arithmetic for the testbenches, written independently
// of the design: bit-serial (MSB first) multiplication with reduction after
// every shift, straight from the definition of GF(2^l) with
// f(t) = t^233 + t^74 + 1 (B-233) or t^283 + t^12 + t^7 + t^5 + 1 (B-283),
// and a plain shift-and-add carry-less product.
package tb_gf_pkg;
  import ecc_pkg::*;

  function automatic logic [283:0] ref_poly(ec_t ec);
    logic [283:0] f;
    f = '0;
    if (ec == EC_B283) begin f[283] = 1; f[12] = 1; f[7] = 1; f[5] = 1; f[0] = 1; end
    else               begin f[233] = 1; f[74] = 1; f[0] = 1; end
    return f;
  endfunction

  function automatic felem_t ref_mul(felem_t a, felem_t b, ec_t ec);
    logic [283:0] r, f;
    int l;
    l = (ec == EC_B283) ? 283 : 233;
    f = ref_poly(ec);
    r = '0;
    for (int i = l - 1; i >= 0; i--) begin
      r = r << 1;
      if (r[l]) r ^= f;
      if (b[i]) r ^= {1'b0, a};
    end
    return r[282:0];
  endfunction

  function automatic felem_t rand_elem(ec_t ec);
    felem_t v;
    for (int i = 0; i < 283; i += 32) v[i +: 32] = $urandom;
    return v & ec_mask(ec);
  endfunction

  function automatic logic [140:0] ref_clmul71(logic [70:0] a, logic [70:0] b);
    logic [140:0] r;
    r = '0;
    for (int i = 0; i < 71; i++) if (b[i]) r ^= (141'(a) << i);
    return r;
  endfunction
endpackage
