// gf16_sq: squarer in GF((2^2)^2) with P1(y) = y^2 + y + phi.
//
// (qH*y + qL)^2 = qH^2 * y^2 + qL^2 = qH^2 * y + (phi * qH^2 ^ qL^2).
// In GF(2^2) squaring is linear: (a1*x + a0)^2 = a1*x + (a1 ^ a0). For phi = 2 this reduces to
// the four-XOR network of the published figure: {q3, q3^q2, q2^q1, q3^q1^q0}. Here phi is a
// run-time choice, so the multiply-by-phi is the selectable one. Combinational.
module gf16_sq
  import gf_pkg::*;
(
  input  gf16_t q,
  input  logic  phi_is3,
  output gf16_t s
);
  gf4_t h_sq, l_sq, h_sq_phi;

  assign h_sq = {q[3], q[3] ^ q[2]};
  assign l_sq = {q[1], q[1] ^ q[0]};

  gf4_mul_phi u_phi (.q(h_sq), .phi_is3(phi_is3), .k(h_sq_phi));

  assign s = {h_sq, h_sq_phi ^ l_sq};
endmodule
