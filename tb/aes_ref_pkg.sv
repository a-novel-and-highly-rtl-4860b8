// aes_ref_pkg: reference models used by the testbenches.
//
// Written from the definitions, independently of the RTL structure:
//  * tower-field products by schoolbook polynomial multiplication followed by reduction with
//    x^2 = x + 1, y^2 = y + phi, z^2 = z + lambda (the RTL uses the three-multiplier forms);
//  * the AES field by shift-and-add modulo x^8+x^4+x^3+x+1, inverses as a^254, the S-box
//    affine step bit by bit as in FIPS-197 (b'_i = b_i ^ b_i+4 ^ b_i+5 ^ b_i+6 ^ b_i+7 ^ c_i);
//  * AES-128 encryption on a 4x4 byte array with a full key expansion.
package aes_ref_pkg;

  typedef logic [7:0] byte_t;
  typedef logic [7:0][7:0] mat8_t;   // [row = output bit][column = input bit]

  // ----------------------------------------------------------------- tower field B
  function automatic logic [1:0] r_gf4_mul(logic [1:0] a, logic [1:0] b);
    logic [2:0] p;
    p = '0;
    for (int i = 0; i < 2; i++) if (b[i]) p ^= 3'(a) << i;
    if (p[2]) p ^= 3'b111;            // x^2 = x + 1
    return p[1:0];
  endfunction

  function automatic logic [3:0] r_gf16_mul(logic [3:0] a, logic [3:0] b, logic [1:0] phi);
    logic [1:0] c2, c1, c0;
    c2 = r_gf4_mul(a[3:2], b[3:2]);
    c1 = r_gf4_mul(a[3:2], b[1:0]) ^ r_gf4_mul(a[1:0], b[3:2]);
    c0 = r_gf4_mul(a[1:0], b[1:0]);
    // c2*y^2 = c2*y + c2*phi
    return {c1 ^ c2, c0 ^ r_gf4_mul(c2, phi)};
  endfunction

  function automatic byte_t r_gfb_mul(byte_t a, byte_t b, logic [1:0] phi, logic [3:0] lambda);
    logic [3:0] c2, c1, c0;
    c2 = r_gf16_mul(a[7:4], b[7:4], phi);
    c1 = r_gf16_mul(a[7:4], b[3:0], phi) ^ r_gf16_mul(a[3:0], b[7:4], phi);
    c0 = r_gf16_mul(a[3:0], b[3:0], phi);
    return {c1 ^ c2, c0 ^ r_gf16_mul(c2, lambda, phi)};
  endfunction

  function automatic logic [3:0] r_gf16_inv(logic [3:0] a, logic [1:0] phi);
    for (int c = 0; c < 16; c++)
      if (r_gf16_mul(a, 4'(c), phi) == 4'h1) return 4'(c);
    return 4'h0;
  endfunction

  function automatic byte_t r_matmul(mat8_t m, byte_t q);
    byte_t o;
    for (int i = 0; i < 8; i++) begin
      o[i] = 1'b0;
      for (int j = 0; j < 8; j++) o[i] ^= m[i][j] & q[j];
    end
    return o;
  endfunction

  // Matrix from eight decimal rows as printed in the paper's notation: the first row listed
  // produces output bit 7, and the row's MSB is the coefficient of input bit 7.
  function automatic mat8_t r_mat_rows(byte_t r0, byte_t r1, byte_t r2, byte_t r3,
                                       byte_t r4, byte_t r5, byte_t r6, byte_t r7);
    mat8_t m;
    m[7] = r0; m[6] = r1; m[5] = r2; m[4] = r3;
    m[3] = r4; m[2] = r5; m[1] = r6; m[0] = r7;
    return m;
  endfunction

  // ----------------------------------------------------------------- AES field A
  function automatic byte_t r_aes_mul(byte_t a, byte_t b);
    logic [8:0] aa;
    byte_t p;
    aa = {1'b0, a};
    p  = '0;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= aa[7:0];
      aa = aa << 1;
      if (aa[8]) aa ^= 9'h11b;
    end
    return p;
  endfunction

  function automatic byte_t r_aes_inv(byte_t a);
    byte_t r;
    r = 8'h01;
    for (int i = 0; i < 254; i++) r = r_aes_mul(r, a);   // a^254 (0 maps to 0)
    return (a == 8'h00) ? 8'h00 : r;
  endfunction

  function automatic byte_t r_affine(byte_t b);
    byte_t o;
    localparam byte_t C = 8'h63;
    for (int i = 0; i < 8; i++)
      o[i] = b[i] ^ b[(i + 4) % 8] ^ b[(i + 5) % 8] ^ b[(i + 6) % 8] ^ b[(i + 7) % 8] ^ C[i];
    return o;
  endfunction

  function automatic byte_t r_sbox(byte_t a);
    return r_affine(r_aes_inv(a));
  endfunction

  // ----------------------------------------------------------------- AES-128
  typedef byte_t state_t [4][4];   // [row][column]

  function automatic state_t r_to_state(logic [127:0] v);
    state_t s;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++) s[r][c] = v[127 - 8 * (4 * c + r) -: 8];
    return s;
  endfunction

  function automatic logic [127:0] r_from_state(state_t s);
    logic [127:0] v;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++) v[127 - 8 * (4 * c + r) -: 8] = s[r][c];
    return v;
  endfunction

  function automatic logic [127:0] r_mixcolumns(logic [127:0] v);
    state_t s, o;
    s = r_to_state(v);
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        o[r][c] = r_aes_mul(8'h02, s[r][c]) ^ r_aes_mul(8'h03, s[(r + 1) % 4][c]) ^
                  s[(r + 2) % 4][c] ^ s[(r + 3) % 4][c];
    return r_from_state(o);
  endfunction

  // One encryption round; last = 1 skips MixColumns.
  function automatic logic [127:0] r_round(logic [127:0] v, logic [127:0] rk, bit last);
    state_t s, t;
    s = r_to_state(v);
    for (int r = 0; r < 4; r++)
      for (int c = 0; c < 4; c++) t[r][c] = r_sbox(s[r][(c + r) % 4]);
    v = r_from_state(t);
    if (!last) v = r_mixcolumns(v);
    return v ^ rk;
  endfunction

  typedef logic [127:0] keys_t [11];

  function automatic keys_t r_expand(logic [127:0] key);
    keys_t k;
    logic [31:0] w [44];
    logic [31:0] t;
    byte_t rcon;
    rcon = 8'h01;
    for (int i = 0; i < 4; i++) w[i] = key[127 - 32 * i -: 32];
    for (int i = 4; i < 44; i++) begin
      t = w[i - 1];
      if (i % 4 == 0) begin
        t = {t[23:0], t[31:24]};
        t = {r_sbox(t[31:24]), r_sbox(t[23:16]), r_sbox(t[15:8]), r_sbox(t[7:0])};
        t[31:24] ^= rcon;
        rcon = r_aes_mul(rcon, 8'h02);
      end
      w[i] = w[i - 4] ^ t;
    end
    for (int r = 0; r < 11; r++) k[r] = {w[4 * r], w[4 * r + 1], w[4 * r + 2], w[4 * r + 3]};
    return k;
  endfunction

  function automatic logic [127:0] r_encrypt(logic [127:0] pt, logic [127:0] key);
    keys_t k;
    logic [127:0] v;
    k = r_expand(key);
    v = pt ^ k[0];
    for (int r = 1; r <= 10; r++) v = r_round(v, k[r], r == 10);
    return v;
  endfunction

endpackage
