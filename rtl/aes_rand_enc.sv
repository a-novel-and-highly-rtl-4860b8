// aes_rand_enc: AES-128 encryptor, one round per clock, with the S-box field representation
// chosen at random for every block as a countermeasure against differential power analysis.
//
// Operation. When 'ready' is high, a 'start' pulse takes 'plaintext' and 'key'. On that clock
// edge the core stores plaintext ^ key (the initial AddRoundKey) and latches the working
// parameter set {phi, lambda, delta, delta^-1} read from the 32-entry table (iso_rom) at the
// index given by the main LFSR, together with two decoy delta^-1 matrices read at indices given
// by a second LFSR. Each of the next ten clocks computes one full round (aes_round) with the
// round key produced on the fly (aes_key_sched); all 20 S-boxes use the latched set. After the
// tenth round 'done' is high for one cycle with 'ciphertext' valid, 11 cycles after 'start',
// and 'ready' is high again in that same cycle, so blocks can follow back to back every
// 11 cycles. The ciphertext does not depend on the set used.
//
// Randomness. Both LFSRs are 16-bit Galois LFSRs (x^16+x^14+x^13+x^11+1) that advance once per
// block. 'seed_load' (when idle) loads seed_main and seed_decoy, so an encryptor and a decryptor
// can be given the same starting state, much as they share a key. The main LFSR shifts 5 bits
// per block and its low 5 bits index the working set. The decoy LFSR shifts 10 bits per block;
// its bits [4:0] and [9:5] are turned into two indices that always differ from the working
// index and from each other: decoy0 = work ^ n0 and decoy1 = work ^ n1, where n0, n1 are the
// drawn values forced nonzero and, if equal, n1 is replaced by ~n0 (or 1 when that is zero).
//
// Decoy register. The 16 S-boxes of the round also push their pre-final value through the two
// decoy matrices; those 256 bits are stored every round in 'decoy_q' next to the state register,
// so that the write of the real S-box results coincides with two unrelated writes. The register
// is an output only so that synthesis keeps it; it carries nothing of use.
module aes_rand_enc
  import gf_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // pseudorandom generator seeding
  input  logic              seed_load,
  input  logic [15:0]       seed_main,
  input  logic [15:0]       seed_decoy,
  // block interface
  input  logic              start,
  input  logic [127:0]      plaintext,
  input  logic [127:0]      key,
  output logic              ready,
  output logic              done,
  output logic [127:0]      ciphertext,
  // decoy register (no functional meaning)
  output logic [1:0][127:0] decoy_q
);
  localparam int unsigned ROUNDS = 10;
  localparam iso_set_t    RESET_SET = f_iso_set(0);

  typedef enum logic {S_IDLE, S_RUN} state_e;

  state_e        state;
  logic [3:0]    rnd;
  logic [127:0]  st, st_next;
  logic [127:0]  rk_next;
  logic          accept, last;

  logic [15:0]   rng_main, rng_decoy;
  logic [ISO_IDX_W-1:0] rom_idx [3];
  iso_set_t             rom_set [3];
  logic [ISO_IDX_W-1:0] n0, n1, n1_raw;

  iso_set_t      set_q;
  gf2_mat8_t     dec_inv_q [2];
  logic [1:0][127:0] decoy_d;

  assign ready  = (state == S_IDLE);
  assign accept = ready && start;
  assign last   = (rnd == 4'(ROUNDS));

  // ------------------------------------------------------------------ random set selection
  lfsr #(.WIDTH(16), .TAPS(16'hB400), .SHIFTS(5), .RESET_SEED(16'hACE1)) u_rng_main (
    .clk(clk), .rst_n(rst_n), .load(seed_load && ready), .seed(seed_main), .step(accept),
    .state(rng_main)
  );
  lfsr #(.WIDTH(16), .TAPS(16'hB400), .SHIFTS(10), .RESET_SEED(16'h1D0F)) u_rng_decoy (
    .clk(clk), .rst_n(rst_n), .load(seed_load && ready), .seed(seed_decoy), .step(accept),
    .state(rng_decoy)
  );

  always_comb begin
    rom_idx[0] = rng_main[ISO_IDX_W-1:0];
    n0         = (rng_decoy[4:0] == '0) ? ISO_IDX_W'(1) : rng_decoy[4:0];
    n1_raw     = (rng_decoy[9:5] == '0) ? ISO_IDX_W'(1) : rng_decoy[9:5];
    if (n1_raw != n0)     n1 = n1_raw;
    else if (~n0 != '0)   n1 = ~n0;
    else                  n1 = ISO_IDX_W'(1);
    rom_idx[1] = rom_idx[0] ^ n0;
    rom_idx[2] = rom_idx[0] ^ n1;
  end

  iso_rom #(.NREAD(3)) u_rom (.idx(rom_idx), .set(rom_set));

  // ------------------------------------------------------------------ datapath
  aes_key_sched u_ks (
    .clk(clk), .rst_n(rst_n), .load(accept), .key(key), .advance(state == S_RUN),
    .set(set_q), .rk_next(rk_next)
  );

  aes_round u_round (
    .st(st), .rk(rk_next), .last(last), .set(set_q),
    .decoy_inv0(dec_inv_q[0]), .decoy_inv1(dec_inv_q[1]),
    .st_out(st_next), .decoy(decoy_d)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      rnd          <= '0;
      st           <= '0;
      done         <= 1'b0;
      set_q        <= RESET_SET;
      dec_inv_q[0] <= '0;
      dec_inv_q[1] <= '0;
      decoy_q      <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          st           <= plaintext ^ key;
          set_q        <= rom_set[0];
          dec_inv_q[0] <= rom_set[1].delta_inv;
          dec_inv_q[1] <= rom_set[2].delta_inv;
          rnd          <= 4'd1;
          state        <= S_RUN;
        end
        S_RUN: begin
          st      <= st_next;
          decoy_q <= decoy_d;
          rnd     <= rnd + 4'd1;
          if (last) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign ciphertext = st;

  // The working set may not change while a block is being encrypted.
  a_set_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_RUN) |=> $stable(set_q) || $past(last));
  // A block is finished only from the last round.
  a_done_after_last: assert property (@(posedge clk) disable iff (!rst_n)
    done |-> $past(state == S_RUN && last));
endmodule
