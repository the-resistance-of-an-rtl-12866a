// gh_ref_pkg: reference model of Grasshopper for the testbenches.
//
// Written apart from the RTL: field multiplication is a carry-less product reduced afterwards
// by the 9-bit polynomial 0x1C3, L is built from the 16 coefficients in the order of the
// standard's formula, and the whole key schedule and cipher are straight-line functions with
// no clocking. Only the S' table itself is shared with the RTL; the testbenches check it
// against the published S test vectors.
package gh_ref_pkg;

  typedef logic [127:0] blk_t;

  function automatic logic [7:0] ref_mul(logic [7:0] a, logic [7:0] b);
    logic [14:0] p = '0;
    for (int i = 0; i < 8; i++) if (b[i]) p ^= 15'(a) << i;
    for (int i = 14; i >= 8; i--) if (p[i]) p ^= 15'(9'h1C3) << (i - 8);
    return p[7:0];
  endfunction

  // Coefficients of x15 .. x0 as printed in the standard.
  function automatic logic [7:0] ref_coef(int i);
    logic [7:0] c [16] = '{148, 32, 133, 16, 194, 192, 1, 251, 1, 192, 194, 16, 133, 32, 148, 1};
    return c[15 - i];
  endfunction

  function automatic blk_t ref_r(blk_t x);
    logic [7:0] acc = '0;
    for (int i = 15; i >= 0; i--) acc ^= ref_mul(ref_coef(i), x[8*i +: 8]);
    return {acc, x[127:8]};
  endfunction

  function automatic blk_t ref_l(blk_t x);
    for (int i = 0; i < 16; i++) x = ref_r(x);
    return x;
  endfunction

  function automatic blk_t ref_s(blk_t x);
    blk_t y;
    for (int i = 0; i < 16; i++) y[8*i +: 8] = gh_pkg::SBOX[x[8*i +: 8]];
    return y;
  endfunction

  function automatic void ref_keys(logic [255:0] key, output blk_t k [10]);
    blk_t a1 = key[255:128], a0 = key[127:0], t;
    k[0] = a1; k[1] = a0;
    for (int i = 1; i <= 32; i++) begin
      t  = ref_l(ref_s(a1 ^ ref_l(blk_t'(i)))) ^ a0;
      a0 = a1;
      a1 = t;
      if (i % 8 == 0) begin
        k[2*(i/8)]     = a1;
        k[2*(i/8) + 1] = a0;
      end
    end
  endfunction

  function automatic blk_t ref_encrypt(logic [255:0] key, blk_t pt);
    blk_t k [10];
    ref_keys(key, k);
    for (int r = 0; r < 9; r++) pt = ref_l(ref_s(pt ^ k[r]));
    return pt ^ k[9];
  endfunction

  function automatic blk_t rand128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  // Published test vectors of the standard.
  localparam logic [255:0] TV_KEY =
    256'h8899aabbccddeeff0011223344556677fedcba98765432100123456789abcdef;
  localparam blk_t TV_PT = 128'h1122334455667700ffeeddccbbaa9988;
  localparam blk_t TV_CT = 128'h7f679d90bebc24305a468d42b9d4edcd;
  localparam blk_t TV_K [10] = '{
    128'h8899aabbccddeeff0011223344556677, 128'hfedcba98765432100123456789abcdef,
    128'hdb31485315694343228d6aef8cc78c44, 128'h3d4553d8e9cfec6815ebadc40a9ffd04,
    128'h57646468c44a5e28d3e59246f429f1ac, 128'hbd079435165c6432b532e82834da581b,
    128'h51e640757e8745de705727265a0098b1, 128'h5a7925017b9fdd3ed72a91a22286f984,
    128'hbb44e25378c73123a5f32f73cdb6e517, 128'h72e9dd7416bcf45b755dbaa88e4a4043
  };
endpackage
