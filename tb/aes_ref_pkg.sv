// aes_ref_pkg: reference model of AES-128 for the testbenches.
//
// Written apart from the RTL and with different algorithms, so that a
// testbench compares two independent derivations: GF(2^8) products by
// carry-less multiplication followed by polynomial reduction, field inverses
// by exhaustive search, the affine map by byte rotations, and the inverse
// cipher in the straightforward FIPS-197 order (InvShiftRows, InvSubBytes,
// AddRoundKey, InvMixColumns) with the unmodified round keys.
package aes_ref_pkg;

  typedef logic [7:0]   u8;
  typedef logic [127:0] u128;
  typedef u8            st_t [4][4];   // [row][column]

  // Carry-less 8x8 product, then reduction of the 15-bit result by
  // x^8 = x^4 + x^3 + x + 1 from the top bit down.
  function automatic u8 ref_mul(u8 a, u8 b);
    logic [14:0] prod = '0;
    for (int i = 0; i < 8; i++) if (b[i]) prod ^= 15'(a) << i;
    for (int i = 14; i >= 8; i--) if (prod[i]) prod ^= 15'h11B << (i - 8);
    return prod[7:0];
  endfunction

  function automatic u8 ref_inv(u8 a);
    if (a == 0) return 8'h00;
    for (int b = 1; b < 256; b++) if (ref_mul(a, u8'(b)) == 8'h01) return u8'(b);
    return 8'h00;
  endfunction

  function automatic u8 rotl(u8 a, int n);
    return u8'((a << n) | (a >> (8 - n)));
  endfunction

  function automatic u8 ref_sbox(u8 a);
    u8 b = ref_inv(a);
    return b ^ rotl(b, 1) ^ rotl(b, 2) ^ rotl(b, 3) ^ rotl(b, 4) ^ 8'h63;
  endfunction

  // Tables filled once by init(); the tests call it first.
  u8 S [256];
  u8 SI [256];
  function automatic void init();
    for (int i = 0; i < 256; i++) begin
      S[i] = ref_sbox(u8'(i));
      SI[S[i]] = u8'(i);
    end
  endfunction

  function automatic st_t to_st(u128 b);
    st_t s;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++) s[r][c] = b[127 - 8*(4*c + r) -: 8];
    return s;
  endfunction

  function automatic u128 from_st(st_t s);
    u128 b;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++) b[127 - 8*(4*c + r) -: 8] = s[r][c];
    return b;
  endfunction

  function automatic st_t ref_sub(st_t s, bit inv);
    for (int r = 0; r < 4; r++)
      for (int c = 0; c < 4; c++) s[r][c] = inv ? SI[s[r][c]] : S[s[r][c]];
    return s;
  endfunction

  function automatic st_t ref_shift(st_t s, bit inv);
    st_t o;
    for (int r = 0; r < 4; r++)
      for (int c = 0; c < 4; c++)
        if (!inv) o[r][c] = s[r][(c + r) % 4];
        else      o[r][(c + r) % 4] = s[r][c];
    return o;
  endfunction

  // Column times a circulant matrix whose first row is m0 m1 m2 m3.
  function automatic st_t ref_mix(st_t s, bit inv);
    u8 m [4];
    st_t o;
    if (!inv) m = '{8'h02, 8'h03, 8'h01, 8'h01};
    else      m = '{8'h0E, 8'h0B, 8'h0D, 8'h09};
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++) begin
        o[r][c] = 8'h00;
        for (int k = 0; k < 4; k++) o[r][c] ^= ref_mul(m[(k - r + 4) % 4], s[k][c]);
      end
    return o;
  endfunction

  function automatic u128 ref_mix_block(u128 b, bit inv);
    return from_st(ref_mix(to_st(b), inv));
  endfunction

  // Round keys as 44 words.
  typedef u128 keys_t [11];
  function automatic keys_t ref_keys(u128 key);
    logic [31:0] w [44];
    keys_t k;
    u8 rc = 8'h01;
    for (int i = 0; i < 4; i++) w[i] = key[127 - 32*i -: 32];
    for (int i = 4; i < 44; i++) begin
      logic [31:0] t = w[i-1];
      if (i % 4 == 0) begin
        t = {t[23:0], t[31:24]};
        t = {S[t[31:24]], S[t[23:16]], S[t[15:8]], S[t[7:0]]};
        t[31:24] ^= rc;
        rc = ref_mul(rc, 8'h02);
      end
      w[i] = w[i-4] ^ t;
    end
    for (int r = 0; r < 11; r++) k[r] = {w[4*r], w[4*r+1], w[4*r+2], w[4*r+3]};
    return k;
  endfunction

  function automatic u128 ref_encrypt(u128 p, u128 key);
    keys_t k = ref_keys(key);
    st_t s = to_st(p ^ k[0]);
    for (int r = 1; r <= 10; r++) begin
      s = ref_shift(ref_sub(s, 0), 0);
      if (r != 10) s = ref_mix(s, 0);
      s = to_st(from_st(s) ^ k[r]);
    end
    return from_st(s);
  endfunction

  function automatic u128 ref_decrypt(u128 c, u128 key);
    keys_t k = ref_keys(key);
    st_t s = to_st(c ^ k[10]);
    for (int r = 9; r >= 0; r--) begin
      s = ref_sub(ref_shift(s, 1), 1);
      s = to_st(from_st(s) ^ k[r]);
      if (r != 0) s = ref_mix(s, 1);
    end
    return from_st(s);
  endfunction

  function automatic u128 rand128();
    return {$urandom(), $urandom(), $urandom(), $urandom()};
  endfunction

endpackage
