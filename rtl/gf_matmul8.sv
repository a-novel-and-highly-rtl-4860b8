// gf_matmul8: product of an 8x8 GF(2) matrix and a byte, o = M * q.
//
// Used for the isomorphism delta (AES field -> tower field) and its inverse. Row i of M gives
// output bit i as the XOR of the input bits where the row holds a one. Because the matrix is
// chosen at run time from the stored parameter sets, the matrix is an input and each output bit
// is an AND-XOR tree; with a constant matrix the same code reduces to the fixed XOR equations.
// Combinational.
module gf_matmul8
  import gf_pkg::*;
(
  input  gf2_mat8_t m,
  input  gf256_t    q,
  output gf256_t    o
);
  always_comb begin
    for (int i = 0; i < 8; i++) o[i] = ^(m[i] & q);
  end
endmodule
