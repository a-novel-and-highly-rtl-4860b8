// gf4_mul: multiplier in GF(2^2) with P0(x) = x^2 + x + 1.
//
// a = a1*x + a0, b = b1*x + b0. Reducing x^2 = x + 1 gives
//   hi = (a1 ^ a0)(b1 ^ b0) ^ a0 b0
//   lo = a1 b1 ^ a0 b0
// which is the three-AND network of the published figure for this block (multiplication in
// GF(2) is an AND). Purely combinational, no clock.
module gf4_mul
  import gf_pkg::*;
(
  input  gf4_t a,
  input  gf4_t b,
  output gf4_t p
);
  logic m_hh, m_ll, m_cross;

  always_comb begin
    m_hh    = a[1] & b[1];
    m_ll    = a[0] & b[0];
    m_cross = (a[1] ^ a[0]) & (b[1] ^ b[0]);
    p       = {m_cross ^ m_ll, m_hh ^ m_ll};
  end
endmodule
