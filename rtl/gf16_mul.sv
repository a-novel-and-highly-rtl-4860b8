// gf16_mul: multiplier in GF((2^2)^2) with P1(y) = y^2 + y + phi.
//
// a = aH*y + aL, b = bH*y + bL over GF(2^2). With y^2 = y + phi:
//   hi = (aH ^ aL)(bH ^ bL) ^ aL bL
//   lo = phi * (aH bH) ^ aL bL
// Three GF(2^2) multipliers and one multiply-by-phi, as in the published block diagram of this
// multiplier. phi is selected at run time (phi_is3). Combinational.
module gf16_mul
  import gf_pkg::*;
(
  input  gf16_t a,
  input  gf16_t b,
  input  logic  phi_is3,
  output gf16_t p
);
  gf4_t hh, ll, mm, hh_phi;

  gf4_mul     u_hh  (.a(a[3:2]),          .b(b[3:2]),          .p(hh));
  gf4_mul     u_ll  (.a(a[1:0]),          .b(b[1:0]),          .p(ll));
  gf4_mul     u_mm  (.a(a[3:2] ^ a[1:0]), .b(b[3:2] ^ b[1:0]), .p(mm));
  gf4_mul_phi u_phi (.q(hh), .phi_is3(phi_is3), .k(hh_phi));

  assign p = {mm ^ ll, hh_phi ^ ll};
endmodule
