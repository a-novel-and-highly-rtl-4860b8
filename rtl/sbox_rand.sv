// sbox_rand: AES SubBytes S-box computed in a randomly chosen composite field.
//
// The byte x is mapped by delta into the tower field B(phi, lambda), inverted there and mapped
// back by delta^-1, after which the fixed AES affine transformation is applied:
//   q = delta*x;  d = lambda*qH^2 ^ (qH ^ qL)*qL;  e = d^-1 (in GF(2^4));
//   inv = (qH*e)*z + (qH ^ qL)*e;  y = affine(delta^-1 * inv).
// Any valid set {phi, lambda, delta, delta^-1} gives the same y for every x, but the internal
// values (and so the switching activity) differ from set to set. The set is an input, held
// stable by the caller for a whole block.
//
// When DECOY is set, the pre-final value inv is also multiplied by two further delta^-1
// matrices chosen independently of the working set, followed by the affine step, in parallel
// with the real output path. Those two results carry no useful value; their purpose is to make
// the power drawn while the real S-box result is stored look like that of several S-boxes. With
// DECOY cleared the two decoy outputs are driven to zero and no decoy logic is built.
//
// Structure follows the published block diagram: delta, x^2 and x lambda on the high half,
// a GF(2^4) multiplier for the xterm term, a GF(2^4) inverter, two GF(2^4) multipliers, then
// delta^-1 plus affine. Combinational, no clock.
module sbox_rand
  import gf_pkg::*;
#(
  parameter bit DECOY = 1'b1
) (
  input  gf256_t    x,
  input  iso_set_t  set,
  input  gf2_mat8_t decoy_inv0,
  input  gf2_mat8_t decoy_inv1,
  output gf256_t    y,
  output gf256_t    decoy_y0,
  output gf256_t    decoy_y1
);
  gf256_t q, inv, pre;
  gf16_t  qh, ql, qs, h_sq, h_sq_lam, xterm, d, e;

  gf_matmul8 u_delta (.m(set.delta), .q(x), .o(q));

  assign qh = q[7:4];
  assign ql = q[3:0];
  assign qs = qh ^ ql;

  gf16_sq         u_sq    (.q(qh), .phi_is3(set.phi_is3), .s(h_sq));
  gf16_mul_lambda u_lam   (.q(h_sq), .phi_is3(set.phi_is3), .lambda(set.lambda), .k(h_sq_lam));
  gf16_mul        u_cross (.a(qs), .b(ql), .phi_is3(set.phi_is3), .p(xterm));

  assign d = h_sq_lam ^ xterm;

  gf16_inv u_inv  (.q(d), .phi_is3(set.phi_is3), .r(e));
  gf16_mul u_hi   (.a(qh), .b(e), .phi_is3(set.phi_is3), .p(inv[7:4]));
  gf16_mul u_lo   (.a(qs), .b(e), .phi_is3(set.phi_is3), .p(inv[3:0]));

  gf_matmul8 u_delta_inv (.m(set.delta_inv), .q(inv), .o(pre));
  assign y = f_affine(pre);

  if (DECOY) begin : g_decoy
    gf256_t pre0, pre1;
    gf_matmul8 u_dec0 (.m(decoy_inv0), .q(inv), .o(pre0));
    gf_matmul8 u_dec1 (.m(decoy_inv1), .q(inv), .o(pre1));
    assign decoy_y0 = f_affine(pre0);
    assign decoy_y1 = f_affine(pre1);
  end else begin : g_no_decoy
    assign decoy_y0 = '0;
    assign decoy_y1 = '0;
  end
endmodule
