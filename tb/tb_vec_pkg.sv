// tb_vec_pkg: known-answer vectors for the testbenches, computed with an
// independent software model of B-233 / B-283 (affine double-and-add over
// GF(2^l)). Per curve: a scalar K and K*G, a key pair (d, PUB = d*G) with a
// scalar K2 and K2*PUB, and an ECDSA signature (r, s) of a random hash e
// with u1 = e/s, u2 = r/s mod n (plus a multiple of n so that bit l-1 is
// set), T = u1*G + u2*PUB and r = x_T mod n. N is the group order.
package tb_vec_pkg;
  import ecc_pkg::*;
  localparam felem_t B233_K = 283'h1d2128b2f330c5c7fd0a6a3a4506513270e269e0d37f2a74de452e6b438;
  localparam felem_t B233_KGX = 283'hf8437b13adf7ae110098916cbebc91b5e73d936508c76b2647436ad4d4;
  localparam felem_t B233_KGY = 283'h1314dc77d6876064bc6de5b2c7ccfd0f5a3ae00c77a83530d30d59c2c1a;
  localparam felem_t B233_PUBX = 283'h18976d9096e5d213f013fafbf8264050fbbe0cb067db8c8a70b515d13b1;
  localparam felem_t B233_PUBY = 283'h1e2c423f4a127b6831b35381e7dc5fa804ccf41c5d0ff938bca5758b498;
  localparam felem_t B233_K2 = 283'h18d1738f7d93d9c172411e20b8f6b0d549b6f03675a1600a35a099950d8;
  localparam felem_t B233_KPX = 283'h10eae7bea6132ec13243f735131bbe402108b01d62832312eeaae871041;
  localparam felem_t B233_KPY = 283'h19dfdc82857a176af0bd9149192b3ad475db7f149c37207a59f12028eaf;
  localparam felem_t B233_U1 = 283'h169b382e5f126adf4b2590b774541329b2bed2303a201c6dddcb5618eb3;
  localparam felem_t B233_U2 = 283'h1278ff08f6c15315c72a1628b2a0b3ef6f1dc5c7b4f55bb8e56d4f1077d;
  localparam felem_t B233_TX = 283'h17a7f7cfb495dba5166139d927852c19cafad6e08ded84122f1b8603dab;
  localparam felem_t B233_TY = 283'h71f1ee206993797eeab0a895dbf80b4459a894ca388f2be6079e47c802;
  localparam felem_t B233_R = 283'h7a7f7cfb495dba5166139d927852adb33ac63e7e75b63e05cbb4905cd4;
  localparam felem_t B233_N = 283'h1000000000000000000000000000013e974e72f8a6922031d2603cfe0d7;
  localparam felem_t B283_K = 283'h493b79a6b4cb2424a23d5962217beaddbc496cb8e81973e0becd7b03898d190f9ebdacc;
  localparam felem_t B283_KGX = 283'h5b3a794ec732cb86c5f3d361c16a884c5e4ffef3cf5ac42adc50c935ee221160f6931ae;
  localparam felem_t B283_KGY = 283'h2963347626b1bf0d77d8e01f6db77f1dadac9d2a51bc81d5267dc8dc449af8b32aee049;
  localparam felem_t B283_PUBX = 283'h1c3f1a616371b713c1b68b032ee88b376191cdf52f8ca879caeeb84a8fc6d361c089cc4;
  localparam felem_t B283_PUBY = 283'h29d6b4866bac037b17e28e836a74c5786f3509ab451b963f34ec94ce7fe139d114b8e38;
  localparam felem_t B283_K2 = 283'h4404bc0b64ce4228c38fb2918f135d25f557203301850c5a38fd547923a736994e3bf91;
  localparam felem_t B283_KPX = 283'h68180b1df8236e8cfa56d93dffddd6cdb686d9046e56fac56cde62eedd977c9c3fb02d4;
  localparam felem_t B283_KPY = 283'h7328d354a108b4355cfc7595a70efe064ef802fc5f4994f40032bc2a14b6767eca01cd2;
  localparam felem_t B283_U1 = 283'h62b53e1af86cabe6170e45ad4ca68beaabf89d59d2b360852398a1ddedf30a277e2161f;
  localparam felem_t B283_U2 = 283'h4f7bbaf7884d4fc74d2662614e7d1988bb4b62756d88d2952953130422e0fbcbe9d9e3a;
  localparam felem_t B283_TX = 283'h6d4ddb88d7a175355443c3411c4bb943bb3e14348f2df470c76cfb39528fcf9e3afb5be;
  localparam felem_t B283_TY = 283'h3cc2a19aa6e1796caaab73daae66245a739bfc27631f669776516a91e2175d40c4ea152;
  localparam felem_t B283_R = 283'h2d4ddb88d7a175355443c3411c4bb943bb3f1b30f5c7e4a78ec3f9d3a24d27cf40202b7;
  localparam felem_t B283_N = 283'h3ffffffffffffffffffffffffffffffffffef90399660fc938a90165b042a7cefadb307;
endpackage
