// aes_key_sched: on-the-fly AES-128 round-key generation, one round key per clock.
//
// 'load' stores the cipher key as round key 0 and Rcon = 8'h01. 'rk_next' is the following
// round key, computed combinationally from the stored one with the standard recurrence
//   w4 = w0 ^ SubWord(RotWord(w3)) ^ {Rcon,0,0,0}, w5 = w1 ^ w4, w6 = w2 ^ w5, w7 = w3 ^ w6;
// 'advance' stores it and moves Rcon on by xtime. The four SubWord S-boxes are the same
// randomized composite-field S-boxes as the data path and use the same working parameter set,
// so no fixed-structure S-box remains in the core; they carry no decoy paths.
module aes_key_sched
  import gf_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [127:0] key,
  input  logic         advance,
  input  iso_set_t     set,
  output logic [127:0] rk_next    // next round key (combinational)
);
  gf256_t rcon;
  logic [127:0] rk;   // current round key
  logic [31:0] w3_rot, w3_sub;
  logic [31:0] t0, t1, t2, t3;

  assign w3_rot = {rk[23:0], rk[31:24]};

  for (genvar b = 0; b < 4; b++) begin : g_sub
    gf256_t unused0, unused1;
    sbox_rand #(.DECOY(1'b0)) u_sbox (
      .x         (w3_rot[31 - 8 * b -: 8]),
      .set       (set),
      .decoy_inv0('0),
      .decoy_inv1('0),
      .y         (w3_sub[31 - 8 * b -: 8]),
      .decoy_y0  (unused0),
      .decoy_y1  (unused1)
    );
  end

  always_comb begin
    t0 = rk[127:96] ^ w3_sub ^ {rcon, 24'h0};
    t1 = rk[95:64] ^ t0;
    t2 = rk[63:32] ^ t1;
    t3 = rk[31:0]  ^ t2;
    rk_next = {t0, t1, t2, t3};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rk   <= '0;
      rcon <= 8'h01;
    end else if (load) begin
      rk   <= key;
      rcon <= 8'h01;
    end else if (advance) begin
      rk   <= rk_next;
      rcon <= f_xtime(rcon);
    end
  end
endmodule
