// mix_columns: the AES MixColumns transformation on a 128-bit state.
//
// The state is in the usual byte order: byte b = st[127-8b -: 8], column c holds bytes 4c..4c+3
// (rows 0..3). Each column is multiplied by c(x) = {03}x^3 + {01}x^2 + {01}x + {02} modulo
// x^4 + 1 in GF(2^8), written with xtime: out_r = 2*a_r ^ 3*a_{r+1} ^ a_{r+2} ^ a_{r+3}.
// Combinational.
module mix_columns
  import gf_pkg::*;
(
  input  logic [127:0] st_in,
  output logic [127:0] st_out
);
  always_comb begin
    for (int c = 0; c < 4; c++) begin
      gf256_t a [4];
      for (int r = 0; r < 4; r++) a[r] = st_in[127 - 8 * (4 * c + r) -: 8];
      for (int r = 0; r < 4; r++) begin
        st_out[127 - 8 * (4 * c + r) -: 8] = f_xtime(a[r]) ^ f_xtime(a[(r + 1) % 4]) ^
                                             a[(r + 1) % 4] ^ a[(r + 2) % 4] ^ a[(r + 3) % 4];
      end
    end
  end
endmodule
