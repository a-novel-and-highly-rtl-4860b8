# AES-128 with a randomly re-chosen composite-field S-box

Differential power analysis (DPA) recovers an AES key by correlating a device's power draw with
a value the attacker can predict. The usual target is the output of the first-round S-box, which
depends on one plaintext byte and one key byte. This design makes the *internal* values of every
S-box unpredictable without changing its output. It does not use masking and adds no second
datapath.

The S-box is built the compact way: the AES byte is mapped into a tower field
GF(((2^2)^2)^2), inverted there with small GF(2^2) and GF(2^4) operations, and mapped back.
That tower field is not unique. Its two field constants, phi and lambda, can each take several
values. For every (phi, lambda) there are eight different isomorphisms delta from the AES field
into it. Each choice gives a different set of intermediate bits for the same input byte, but the
same output byte. The core keeps a table of 32 such parameter sets
{phi, lambda, delta, delta^-1}. Before each block it picks one at random with an LFSR.

Two further delta^-1 matrices, chosen by a second LFSR, are applied to the S-box's last
intermediate value in parallel with the real one. Their results are written into a decoy
register at the same time as the real result is written into the state register.

The RTL is a complete AES-128 encryptor. It uses an iterative ("loop") architecture, one full
round per clock and 11 clocks per block, written in synthesizable SystemVerilog. The
construction follows a published FPGA design. The interface, the size of the random
generators and several other details are this implementation's own choices; they are listed
under "What is this design's own choice" below.

## 1. The tower field and its free parameters

Field A is the AES field, GF(2^8) modulo m(x) = x^8 + x^4 + x^3 + x + 1. Field B is built in
three steps:

| level | field | reduction | constant |
|---|---|---|---|
| 1 | GF(2^2) | x^2 = x + 1 | fixed |
| 2 | GF((2^2)^2) | y^2 = y + phi | phi in {2, 3} |
| 3 | GF(((2^2)^2)^2) | z^2 = z + lambda | lambda in {8 .. 15} |

Both values of phi, and each lambda from 8 to 15 under either phi, give irreducible
polynomials, so there are 16 (phi, lambda) pairs. At every level an element is written as
`hi * t + lo`. Bits [7:4] of a byte are the GF(2^4) high coefficient. Bits [3:2] of a nibble
are the GF(2^2) high coefficient.

The S-box (`sbox_rand`) computes, for an input byte x:

```
q   = delta * x                       (8x8 GF(2) matrix, A -> B)
d   = lambda * qH^2  ^  (qH ^ qL) * qL  (in GF(2^4))
e   = d^-1                            (GF(2^4) inverter, itself a tower of GF(2^2) ops)
inv = (qH * e) * z  +  (qH ^ qL) * e  (= q^-1 in B)
y   = affine(delta^-1 * inv)          (back to A, then the fixed AES affine step)
```

The GF(2^4) pieces are small modules, each exhaustively tested:
- `gf16_mul`: three GF(2^2) multipliers and one multiply-by-phi.
- `gf16_sq`: the squarer.
- `gf16_mul_lambda`: multiply by lambda.
- `gf16_inv`: the GF(2^4) inverter.

They sit on `gf4_mul` (three ANDs) and `gf4_mul_phi`.

**Matrix notation.** Row i of an 8x8 matrix produces output bit i, and bit j of a row is the
coefficient of input bit j. With this convention, a matrix written as eight decimal rows (first
row = output bit 7) reads directly. For example, the row 160 = `1010_0000` means q7 ^ q5.
`gf_matmul8` computes `o[i] = ^(m[i] & q)`.

**What changes with the parameter set, and what does not.**
- Run-time inputs: delta, delta^-1, the multiply-by-lambda and the multiply-by-phi.
- Fixed for every set: the GF(2^2) multipliers, the GF(2^2) inverse and the affine step.

Phi appears inside the GF(2^4) multiplier, the squarer and the inverter, so each of them
contains the two-way `gf4_mul_phi` selector. The multiply-by-lambda is built from 16 constant
XOR networks, one per (phi, lambda) pair. Each network is generated from the field definition,
and a multiplexer picks one, so no general multiplier appears there. The two matrices are
AND-XOR trees whose matrix operand comes from a register.

## 2. The 32 parameter sets (`iso_rom`, `gf_pkg`)

For a given (phi, lambda), an isomorphism A -> B is fixed by where it sends the AES generator
x = 8'h02. The image must be a root beta of m(x) in B, and there are exactly eight such roots.
Column j of delta is beta^j written in B, and delta^-1 is its matrix inverse. All
128 = 16 x 8 isomorphisms therefore give a correct S-box.

The table holds 32 of them: two per (phi, lambda) pair. Set index s = {p, l[2:0], r} means:
- phi = p ? 3 : 2
- lambda = 8 + l
- beta = the r-th smallest root (r = 0 or 1), comparing roots as 8-bit numbers.

The table is not stored as numbers. Constant functions in `gf_pkg` compute it at elaboration:
- `f_root` searches for the roots.
- `f_delta` builds the matrix.
- `f_mat_inv` inverts it by Gauss-Jordan elimination.
- `f_iso_set` assembles one entry.

Each entry is its own localparam, so every elaboration-time evaluation stays small.

**The published example sets.** The source lists a few sets in the decimal-row notation. Checked
with the functions above:

| phi, lambda | delta | delta^-1 | beta | status |
|---|---|---|---|---|
| 2, 12 | 160,222,172,174,198,158,82,67 | 226,68,98,118,62,158,48,117 | 95 | both correct |
| 2, 15 | 160,126,114,162,182,84,16,217 | 46,28,174,2,122,26,144,75 | 120 | both correct |
| 3, 10 | 160,126,172,2,20,132,130,99 | 190,132,62,106,98,2,112,141 | 83 | delta correct; the printed delta^-1 is not its inverse (the correct one is 18,124,146,30,182,22,16,255) |
| 3, 12 | 160,222,172,174,202,238,44,227 | 102,212,230,162,10,234,176,233 | — | delta is not an isomorphism into B(3, 12). It is one into B(2, 14). The printed delta^-1 is not its inverse either |

The source picks its 32 sets by "minimum combinational logic" but does not give the criterion.
Here the matrices are run-time inputs, so every set costs the same hardware, and the simple
root-order rule above is used. As a result, the published examples are not entries of this
table. `tb_iso_rom` checks that the construction reproduces their delta matrices from the betas
in the table above. `tb_sbox_rand` runs the S-box on the three valid ones, with the corrected
delta^-1 for (3, 10).

To use a different selection, change `f_iso_set`. Anything it returns that is a true
isomorphism for its (phi, lambda) works, and `tb_iso_rom` and `tb_sbox_rand` check exactly that.

## 3. Decoy paths

When `DECOY` = 1, `sbox_rand` multiplies `inv` (the tower-field inverse, the value that enters
delta^-1) by two further matrices `decoy_inv0/1`, then applies the affine step to each result.
These outputs have no meaning. In the core, the matrices are the delta^-1 of two other table
entries, drawn per block. The 16 round S-boxes' decoy bytes (2 x 128 bits) are registered
in `decoy_q` on every round clock, next to the state register.

`decoy_q` is a module output only so that synthesis keeps it. In an FPGA flow, a keep attribute
would serve the same purpose. The four key-schedule S-boxes are built with `DECOY` = 0.

## 4. The encryptor core (`aes_rand_enc`)

```
           +--------+   idx   +---------+  set_q (phi, lambda, delta, delta^-1)
 LFSR main +------->+ iso_rom +------------------------------+-------------------+
           +--------+ 3 ports +---------+  dec_inv_q[0..1]   |                   |
 LFSR decoy ---> 2 indices ------^           |               v                   v
                                             |     +---------------+     +---------------+
 plaintext ^ key --> [ state ] ---------------+--->|  aes_round    |<----| aes_key_sched |
                        ^                          | 16 x sbox_rand|     | 4 x sbox_rand |
                        +--------------------------| ShiftRows, MC |     | [round key]   |
                                                   +-------+-------+     +---------------+
                                                           +--> decoy_q
```

| port | dir | width | meaning |
|---|---|---|---|
| clk, rst_n | in | 1 | clock; asynchronous active-low reset |
| seed_load | in | 1 | when `ready`, loads `seed_main` and `seed_decoy` into the two LFSRs |
| seed_main, seed_decoy | in | 16 | LFSR seeds (0 is replaced by 1) |
| start | in | 1 | when `ready`, takes `plaintext` and `key` |
| plaintext, key | in | 128 | FIPS-197 byte order (byte 0 = bits [127:120]) |
| ready | out | 1 | idle; a start is accepted |
| done | out | 1 | one-cycle pulse; `ciphertext` valid |
| ciphertext | out | 128 | result (held until the next start) |
| decoy_q | out | 2x128 | decoy register, no functional meaning |

**Timing.**
- The start edge stores plaintext ^ key (the initial AddRoundKey) and loads the cipher key into
  the key schedule.
- The same edge latches the working set and the two decoy matrices from the table, and advances
  both LFSRs.
- Each of the next ten clocks applies one round, using the next round key computed
  combinationally from the stored one.
- The round is: 16 randomized S-boxes, ShiftRows, MixColumns (skipped in round 10),
  AddRoundKey.
- `done` rises 11 cycles after `start`, and `ready` is high in the same cycle. A held `start`
  therefore encrypts a block every 11 cycles.

Inputs are read only on the start edge. The working set may not change during a block; an
assertion checks this.

**Randomness.** Both LFSRs are 16-bit Galois registers with polynomial
x^16 + x^14 + x^13 + x^11 + 1 (period 2^16 - 1), and both advance once per block:
- The main LFSR shifts 5 bits per block, and its low 5 bits index the working set.
- The decoy LFSR shifts 10 bits per block and supplies two 5-bit values n0 and n1. These are
  forced nonzero and distinct: n1 becomes ~n0 if they are equal, or 1 if ~n0 is zero.
- The decoy indices are then `work ^ n0` and `work ^ n1`. They always differ from the working
  index and from each other.

Loading the same seeds replays the same sequence of sets. This lets two parties agree on it,
though the ciphertext does not depend on it.

**Critical path.** The path runs through the key-schedule S-box, the round key, and the XOR at
the end of the round, in parallel with the round S-box, ShiftRows and MixColumns. The ROM is
outside the round path, because its output is registered at the start of each block.

## 5. What follows the published design, and what is this design's own choice

Follows the source:
- The three-stage S-box (delta, inversion in B, delta^-1 + affine).
- The field polynomials P0, P1 and P2, and the allowed ranges of phi and lambda.
- The block structure of the GF(2^4) and GF(2^8) inversions and of the multipliers.
- The multiply-by-lambda equations for lambda = 12 and the multiply-by-phi equations.
- The printed delta / delta^-1 of the (2, 12) set and its XOR equations.
- 32 stored sets, an LFSR choosing one per block, and two extra delta^-1 paths selected by a
  second random generator.
- A loop architecture processing one block at a time, with 128-bit keys.

Own choices, where the source is silent:
- The rule that selects the 32 sets.
- How a run-time parameter reaches the datapath: selectable constant networks and AND-XOR
  matrix trees.
- The LFSR width, polynomial, seeds and per-block stepping.
- How the decoy indices are kept distinct, and the decoy register.
- One full round per clock with 16 + 4 S-boxes, and an on-the-fly key schedule that uses the
  randomized S-boxes with the same set.
- The start/ready/done interface, the asynchronous reset, and the 11-cycle latency.
- The phi-dependent squarer. The source calls the squarer common to all sets, but in
  GF((2^2)^2) it depends on phi; for phi = 2 it reduces to the printed four-XOR network.

Not built:
- Decryption. The measured device was an encryptor, and decryption is only described as the
  standard AES inverse. The same S-box could serve an inverse S-box: apply the inverse affine
  step first, then delta, inversion, delta^-1.
- Any power model. The RTL changes which intermediate values appear; it cannot show how much
  that lowers DPA correlation.

## 6. Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. Reference models are in
`tb/aes_ref_pkg.sv`. They are written from the definitions and do not share the RTL's structure:
schoolbook tower-field products, AES inverses as a^254, the affine step bit by bit, and a
textbook AES-128 with full key expansion.

| testbench | what it checks |
|---|---|
| tb_gf4_mul, tb_gf4_mul_phi, tb_gf16_mul, tb_gf16_sq, tb_gf16_mul_lambda, tb_gf16_inv | exhaustive, against the reference and the published equations |
| tb_gf_matmul8 | the printed delta / delta^-1 XOR equations for all bytes, random matrices |
| tb_iso_rom | every entry is a field isomorphism with a correct inverse; entries distinct; published deltas reproduced |
| tb_sbox_rand | all 256 inputs under all 32 sets and the published sets; decoy outputs |
| tb_lfsr | seeding, multi-shift stepping, period 65535 |
| tb_mix_columns, tb_aes_key_sched, tb_aes_round | FIPS-197 values and random vectors, with the set changed every cycle |
| tb_aes_rand_enc | FIPS-197 Appendix B and C.1; 40 random blocks; latency 11; back-to-back blocks; set changes between blocks while the ciphertext stays the same; decoy indices; seed replay |
| tb_dpa_workload | the side-channel experiment in the form RTL allows: 1000 blocks with random plaintexts; a noise-free correlation attack on key byte 0, using the Hamming weight of the round-1 tower-field value delta*(pt^k) as leakage and a fixed-set model |

Run any of them with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/gf_pkg.sv tb/aes_ref_pkg.sv tb/tb_aes_rand_enc.sv --top-module tb_aes_rand_enc
./obj_dir/Vtb_aes_rand_enc
```

The top has no parameters, so `tb_aes_rand_enc` runs the design at its real size. The
C++ build takes under a minute, and the run takes well under a second. Avoid calling
`f_iso_set` at simulation time inside short loops in a testbench: Verilator inlines and unrolls
it, which makes the C++ build very slow. Read the sets through an `iso_rom` instance instead, as
the testbenches do.

What `tb_dpa_workload` shows: with one fixed set, the attacker's model matches the leakage exactly, with correlation 1.0. With the set redrawn for every block, the correct key byte reaches about 0.42, against 0.41 for the best wrong guess, over 1000 noise-free traces. The correct key still ranks first in this idealised setting. The random sets shrink its lead to almost nothing, but they do not remove it. Real power traces, with noise and other switching activity, cannot be produced by this simulation. Encrypting the same plaintext again moves the internal S-box value every time, while the ciphertext stays the same.

After generic synthesis, the whole core is roughly 4,000 word-level cells and 558 flip-flops.
In addition, the three read ports of the 32 x 133-bit parameter table are kept as ROMs.
