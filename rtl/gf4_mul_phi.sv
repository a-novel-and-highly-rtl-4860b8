// gf4_mul_phi: multiply a GF(2^2) element by the constant phi of P1(y) = y^2 + y + phi.
//
// phi is one of the two values for which P1 is irreducible, {10}b = 2 or {11}b = 3, and it is
// part of the randomly chosen field parameter set, so both constant multipliers are built and
// one is selected:
//   phi = 2 : k1 = q1 ^ q0, k0 = q1
//   phi = 3 : k1 = q0,      k0 = q1 ^ q0
// Both equations follow the published derivation for the two constants. Combinational.
module gf4_mul_phi
  import gf_pkg::*;
(
  input  gf4_t q,
  input  logic phi_is3,   // 1: phi = 3, 0: phi = 2
  output gf4_t k
);
  gf4_t k_phi2, k_phi3;

  always_comb begin
    k_phi2 = {q[1] ^ q[0], q[1]};
    k_phi3 = {q[0], q[1] ^ q[0]};
    k      = phi_is3 ? k_phi3 : k_phi2;
  end
endmodule
