// gf_pkg: types and constant functions for the randomized composite-field AES S-box.
//
// The S-box computes the AES inverse in a tower field B = GF(((2^2)^2)^2) built with
//   GF(2^2)      : P0(x) = x^2 + x + 1
//   GF((2^2)^2)  : P1(y) = y^2 + y + phi,    phi    in {2, 3}
//   GF(((2^2)^2)^2): P2(z) = z^2 + z + lambda, lambda in {8 .. 15}
// Every element is split into a high half and a low half, hi*x + lo, at each level: bits [7:4]
// of a byte are the GF(2^4) high coefficient, bits [3:2] of a nibble the GF(2^2) high
// coefficient. A byte of the AES field A is moved into B by an 8x8 GF(2) matrix delta and back
// by delta^-1. Row i of a matrix produces output bit i; bit j of a row is the coefficient of
// input bit j, so the row 8'd160 = 8'b1010_0000 reads q7 ^ q5 (the decimal row notation used
// for the published parameter sets).
//
// Which (phi, lambda, delta, delta^-1) are used is chosen at run time from a table of
// ISO_SETS = 32 sets. The published work only says that 32 suitable sets exist and lists a few;
// this package computes the table instead of storing numbers. Set index s = {p, l[2:0], r}:
//   phi    = p ? 3 : 2
//   lambda = 8 + l
//   delta  = the isomorphism A -> B that sends the AES generator x (8'h02) to beta, where beta
//            is the r-th smallest (as an 8-bit number) root of m(x) = x^8+x^4+x^3+x+1 in B.
// Column j of delta is then beta^j written in B. delta^-1 is its matrix inverse. All 16 pairs
// (phi, lambda) give a valid tower field, and each has exactly 8 roots, so every set is a field
// isomorphism and every S-box built from one gives the standard AES output.
package gf_pkg;

  typedef logic [1:0] gf4_t;
  typedef logic [3:0] gf16_t;
  typedef logic [7:0] gf256_t;
  typedef logic [7:0][7:0] gf2_mat8_t;   // [row = output bit][column = input bit]

  localparam int unsigned ISO_SETS = 32;
  localparam int unsigned ISO_IDX_W = $clog2(ISO_SETS);

  // One parameter set of the composite field.
  typedef struct packed {
    logic      phi_is3;   // phi = 3 when set, phi = 2 otherwise
    gf16_t     lambda;    // 8 .. 15
    gf2_mat8_t delta;     // A -> B
    gf2_mat8_t delta_inv; // B -> A
  } iso_set_t;

  // ---------------------------------------------------------------------------------------------
  // Constant functions (used at elaboration to build the parameter table)
  // ---------------------------------------------------------------------------------------------
  function automatic gf4_t f_gf4_mul(gf4_t a, gf4_t b);
    logic h, l;
    h = ((a[1] ^ a[0]) & (b[1] ^ b[0])) ^ (a[0] & b[0]);
    l = (a[1] & b[1]) ^ (a[0] & b[0]);
    return {h, l};
  endfunction

  function automatic gf16_t f_gf16_mul(gf16_t a, gf16_t b, gf4_t phi);
    gf4_t hh, ll, mm;
    hh = f_gf4_mul(a[3:2], b[3:2]);
    ll = f_gf4_mul(a[1:0], b[1:0]);
    mm = f_gf4_mul(a[3:2] ^ a[1:0], b[3:2] ^ b[1:0]);
    return {mm ^ ll, f_gf4_mul(hh, phi) ^ ll};
  endfunction

  function automatic gf256_t f_gfb_mul(gf256_t a, gf256_t b, gf4_t phi, gf16_t lambda);
    gf16_t hh, ll, mm;
    hh = f_gf16_mul(a[7:4], b[7:4], phi);
    ll = f_gf16_mul(a[3:0], b[3:0], phi);
    mm = f_gf16_mul(a[7:4] ^ a[3:0], b[7:4] ^ b[3:0], phi);
    return {mm ^ ll, f_gf16_mul(hh, lambda, phi) ^ ll};
  endfunction

  function automatic gf256_t f_matmul(gf2_mat8_t m, gf256_t q);
    gf256_t o;
    for (int i = 0; i < 8; i++) o[i] = ^(m[i] & q);
    return o;
  endfunction

  // The r-th smallest root of m(x) = x^8+x^4+x^3+x+1 in B(phi, lambda).
  function automatic gf256_t f_root(gf4_t phi, gf16_t lambda, int unsigned r);
    int unsigned found;
    gf256_t b2, b4, b8, b3, v, root;
    found = 0;
    root  = '0;
    for (int c = 2; c < 256; c++) begin
      b2 = f_gfb_mul(8'(c), 8'(c), phi, lambda);
      b3 = f_gfb_mul(b2, 8'(c), phi, lambda);
      b4 = f_gfb_mul(b2, b2, phi, lambda);
      b8 = f_gfb_mul(b4, b4, phi, lambda);
      v  = b8 ^ b4 ^ b3 ^ 8'(c) ^ 8'h01;
      if (v == 8'h00) begin
        if (found == r) root = 8'(c);
        found++;
      end
    end
    return root;
  endfunction

  // delta for the isomorphism sending the AES generator 8'h02 to beta.
  function automatic gf2_mat8_t f_delta(gf4_t phi, gf16_t lambda, gf256_t beta);
    gf2_mat8_t m;
    gf256_t col;
    col = 8'h01;
    for (int j = 0; j < 8; j++) begin
      for (int i = 0; i < 8; i++) m[i][j] = col[i];
      col = f_gfb_mul(col, beta, phi, lambda);
    end
    return m;
  endfunction

  // Inverse of an invertible 8x8 GF(2) matrix by Gauss-Jordan elimination.
  function automatic gf2_mat8_t f_mat_inv(gf2_mat8_t m);
    gf2_mat8_t a, r;
    logic [7:0] t;
    int p;
    a = m;
    for (int i = 0; i < 8; i++) r[i] = 8'(1 << i);
    for (int c = 0; c < 8; c++) begin
      p = c;
      for (int i = 7; i >= c; i--) if (a[i][c]) p = i;
      t = a[c]; a[c] = a[p]; a[p] = t;
      t = r[c]; r[c] = r[p]; r[p] = t;
      for (int i = 0; i < 8; i++) begin
        if (i != c && a[i][c]) begin
          a[i] = a[i] ^ a[c];
          r[i] = r[i] ^ r[c];
        end
      end
    end
    return r;
  endfunction

  function automatic iso_set_t f_iso_set(int unsigned s);
    iso_set_t st;
    gf4_t phi;
    gf256_t beta;
    st.phi_is3   = s[4];
    phi          = s[4] ? 2'd3 : 2'd2;
    st.lambda    = 4'(8 + ((s >> 1) & 7));
    beta         = f_root(phi, st.lambda, s & 1);
    st.delta     = f_delta(phi, st.lambda, beta);
    st.delta_inv = f_mat_inv(st.delta);
    return st;
  endfunction

  typedef iso_set_t [ISO_SETS-1:0] iso_table_t;


  // AES affine transformation applied after the inversion: b ^ rotl(b,1..4) ^ 8'h63.
  function automatic gf256_t f_affine(gf256_t b);
    return b ^ {b[6:0], b[7]} ^ {b[5:0], b[7:6]} ^ {b[4:0], b[7:5]} ^ {b[3:0], b[7:4]} ^ 8'h63;
  endfunction

  // AES xtime in A (m(x) = 8'h11b).
  function automatic gf256_t f_xtime(gf256_t b);
    return {b[6:0], 1'b0} ^ (b[7] ? 8'h1b : 8'h00);
  endfunction

endpackage
