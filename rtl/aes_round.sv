// aes_round: one AES-128 encryption round, combinational.
//
//   out = AddRoundKey(MixColumns(ShiftRows(SubBytes(st))), rk)   for rounds 1..9
//   out = AddRoundKey(ShiftRows(SubBytes(st)), rk)               for round 10 ('last')
// SubBytes uses sixteen randomized composite-field S-boxes, all driven by the same working
// parameter set, each with its two decoy delta^-1 paths; the 32 decoy bytes are returned on
// 'decoy' (byte b of decoy path k at decoy[k][127-8b -: 8]). State byte order is the usual one:
// byte b = st[127-8b -: 8], byte b is row b%4 of column b/4.
module aes_round
  import gf_pkg::*;
(
  input  logic [127:0]      st,
  input  logic [127:0]      rk,
  input  logic              last,
  input  iso_set_t          set,
  input  gf2_mat8_t         decoy_inv0,
  input  gf2_mat8_t         decoy_inv1,
  output logic [127:0]      st_out,
  output logic [1:0][127:0] decoy
);
  logic [127:0] sub, shifted, mixed;

  for (genvar b = 0; b < 16; b++) begin : g_sbox
    sbox_rand #(.DECOY(1'b1)) u_sbox (
      .x         (st[127 - 8 * b -: 8]),
      .set       (set),
      .decoy_inv0(decoy_inv0),
      .decoy_inv1(decoy_inv1),
      .y         (sub[127 - 8 * b -: 8]),
      .decoy_y0  (decoy[0][127 - 8 * b -: 8]),
      .decoy_y1  (decoy[1][127 - 8 * b -: 8])
    );
  end

  // ShiftRows: row r moves left by r columns, so new (r, c) = old (r, (c + r) mod 4).
  always_comb begin
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        shifted[127 - 8 * (4 * c + r) -: 8] = sub[127 - 8 * (4 * ((c + r) % 4) + r) -: 8];
  end

  mix_columns u_mix (.st_in(shifted), .st_out(mixed));

  assign st_out = (last ? shifted : mixed) ^ rk;
endmodule
