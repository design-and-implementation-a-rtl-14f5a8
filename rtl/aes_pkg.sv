// aes_pkg: types, constants and elaboration-time functions shared by the
// AES-128 core.
//
// A 128-bit block is carried as a plain logic [127:0]. Byte i of the block
// (i = 0..15) sits in bits [127-8*i -: 8]; byte i is State element S(r,c)
// with r = i % 4 and c = i / 4, i.e. the State is filled column by column
// as in FIPS-197.
//
// GF(2^8) arithmetic uses the AES field polynomial m(x) = x^8+x^4+x^3+x+1.
// The S-box tables are built here, once, from the two-step construction:
// multiplicative inverse (with {00} mapped to itself), then the affine
// transform b'_i = b_i ^ b_(i+4) ^ b_(i+5) ^ b_(i+6) ^ b_(i+7) ^ c_i with
// c = {63}. The inverse S-box is the inverse permutation of that table.
package aes_pkg;

  typedef logic [7:0]   byte_t;
  typedef logic [127:0] block_t;
  typedef byte_t        table_t [256];

  // Number of rounds of AES-128.
  localparam int unsigned NR = 10;

  // The low byte of m(x): what is XORed back after a shift that drops a 1.
  localparam byte_t POLY_LOW = 8'h1B;
  localparam byte_t AFFINE_C = 8'h63;

  // All the constant products one multiplicand takes part in: 02 and 03 for
  // MixColumns, 09, 0B, 0D and 0E for InvMixColumns.
  typedef struct packed {
    byte_t x02;
    byte_t x03;
    byte_t x09;
    byte_t x0b;
    byte_t x0d;
    byte_t x0e;
  } gf_prod_t;

  // Byte i of a block, i = 0 is the most significant byte.
  function automatic byte_t get_byte(block_t b, int unsigned i);
    return b[127-8*i -: 8];
  endfunction

  // Multiplication by x modulo m(x).
  function automatic byte_t xtime(byte_t a);
    return {a[6:0], 1'b0} ^ (a[7] ? POLY_LOW : 8'h00);
  endfunction

  // General GF(2^8) product, shift and add.
  function automatic byte_t gf_mul(byte_t a, byte_t b);
    byte_t r = 8'h00;
    byte_t t = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) r ^= t;
      t = xtime(t);
    end
    return r;
  endfunction

  // Multiplicative inverse by square-and-multiply: a^-1 = a^254, and 0 maps
  // to 0 (0^254 = 0).
  function automatic byte_t gf_inv(byte_t a);
    byte_t r = 8'h01;
    byte_t p = a;
    for (int i = 0; i < 8; i++) begin
      if (i != 0) r = gf_mul(r, p);   // 254 = 8'b1111_1110
      p = gf_mul(p, p);
    end
    return r;
  endfunction

  function automatic byte_t affine(byte_t b);
    byte_t r;
    for (int i = 0; i < 8; i++)
      r[i] = b[i] ^ b[(i+4)%8] ^ b[(i+5)%8] ^ b[(i+6)%8] ^ b[(i+7)%8] ^ AFFINE_C[i];
    return r;
  endfunction

  function automatic table_t make_sbox();
    table_t t;
    for (int i = 0; i < 256; i++) t[i] = affine(gf_inv(byte_t'(i)));
    return t;
  endfunction

  function automatic table_t make_inv_sbox();
    table_t f = make_sbox();
    table_t t;
    for (int i = 0; i < 256; i++) t[f[i]] = byte_t'(i);
    return t;
  endfunction

  // Table of the products of every byte by one constant.
  function automatic table_t make_mul_table(byte_t c);
    table_t t;
    for (int i = 0; i < 256; i++) t[i] = gf_mul(byte_t'(i), c);
    return t;
  endfunction

  localparam table_t SBOX     = make_sbox();
  localparam table_t INV_SBOX = make_inv_sbox();

endpackage
