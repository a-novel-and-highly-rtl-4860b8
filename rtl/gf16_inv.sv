// gf16_inv: multiplicative inverse in GF((2^2)^2) with P1(y) = y^2 + y + phi.
//
// For q = qH*y + qL the norm d = phi*qH^2 ^ (qH ^ qL)*qL lies in GF(2^2), and
//   q^-1 = (qH * d^-1)*y + ((qH ^ qL) * d^-1).
// Structure of the published inset: square and multiply-by-phi on the high half, one multiplier
// for (qH ^ qL)*qL, an inverter in GF(2^2) and two output multipliers. The GF(2^2) inverse is
// (a1*x + a0)^-1 = a1*x + (a1 ^ a0) (zero maps to zero). Combinational.
module gf16_inv
  import gf_pkg::*;
(
  input  gf16_t q,
  input  logic  phi_is3,
  output gf16_t r
);
  gf4_t qh, ql, qs, h_sq, h_sq_phi, xterm, d, d_inv;

  assign qh   = q[3:2];
  assign ql   = q[1:0];
  assign qs   = qh ^ ql;
  assign h_sq = {qh[1], qh[1] ^ qh[0]};

  gf4_mul_phi u_phi   (.q(h_sq), .phi_is3(phi_is3), .k(h_sq_phi));
  gf4_mul     u_cross (.a(qs), .b(ql), .p(xterm));

  assign d     = h_sq_phi ^ xterm;
  assign d_inv = {d[1], d[1] ^ d[0]};

  gf4_mul u_hi (.a(qh), .b(d_inv), .p(r[3:2]));
  gf4_mul u_lo (.a(qs), .b(d_inv), .p(r[1:0]));
endmodule
