// tb_aes_rand_enc: end-to-end test of the randomized AES-128 encryptor (the top has no
// parameters, so this is also the full-size test).
//
// Checks: the FIPS-197 Appendix B and C.1 vectors; random plaintext/key pairs against a
// reference AES; the latency of 11 cycles from start to done; blocks started back to back;
// that the working parameter set changes from block to block while the same plaintext and key
// still give the same ciphertext; that the two decoy indices always differ from the working
// index and from each other and the decoy register is written; and that reloading the seeds
// replays the same sequence of parameter sets. Each of these mechanisms is counted, and one that
// never happened counts as a failure.
module tb_aes_rand_enc;
  import gf_pkg::*;
  import aes_ref_pkg::*;

  localparam int WATCHDOG_CYCLES = 200_000;
  localparam int LATENCY = 11;

  int checks = 0;
  int failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic finish_tb();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  logic clk = 1'b0;
  logic rst_n, seed_load, start, ready, done;
  logic [15:0] seed_main, seed_decoy;
  logic [127:0] plaintext, key, ciphertext;
  logic [1:0][127:0] decoy_q;

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (WATCHDOG_CYCLES) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    finish_tb();
  end

  aes_rand_enc dut (
    .clk(clk), .rst_n(rst_n), .seed_load(seed_load), .seed_main(seed_main),
    .seed_decoy(seed_decoy), .start(start), .plaintext(plaintext), .key(key), .ready(ready),
    .done(done), .ciphertext(ciphertext), .decoy_q(decoy_q)
  );

  // mechanism counters
  int n_set_change = 0, n_same_ct_other_set = 0, n_decoy_ok = 0, n_decoy_written = 0;
  int n_back_to_back = 0, n_replay = 0, n_latency = 0;

  logic [ISO_IDX_W-1:0] last_idx;
  bit have_last = 0;
  logic [ISO_IDX_W-1:0] idx_log [$];

  // Observe every accepted block: working and decoy indices.
  always @(posedge clk) begin
    if (rst_n && ready && start) begin
      logic [ISO_IDX_W-1:0] w, d0, d1;
      w  = dut.rom_idx[0];
      d0 = dut.rom_idx[1];
      d1 = dut.rom_idx[2];
      check(d0 != w && d1 != w && d0 != d1, $sformatf("decoy indices %0d %0d vs %0d", d0, d1, w));
      if (d0 != w && d1 != w && d0 != d1) n_decoy_ok++;
      if (have_last && w != last_idx) n_set_change++;
      last_idx  = w;
      have_last = 1;
      idx_log.push_back(w);
    end
    if (rst_n && dut.state == dut.S_RUN && decoy_q != '0) n_decoy_written++;
  end

  // Encrypt one block; 'b2b' starts it in the cycle where the previous one finishes.
  task automatic encrypt(logic [127:0] pt, logic [127:0] k, output logic [127:0] ct);
    int cyc;
    while (!ready) @(negedge clk);
    plaintext = pt; key = k; start = 1'b1;
    @(negedge clk) start = 1'b0;
    plaintext = {$urandom, $urandom, $urandom, $urandom};   // inputs are only read at start
    key       = {$urandom, $urandom, $urandom, $urandom};
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    check(cyc == LATENCY, $sformatf("latency %0d", cyc));
    if (cyc == LATENCY) n_latency++;
    ct = ciphertext;
  endtask

  initial begin
    logic [127:0] ct, ct1, pt, k;
    logic [ISO_IDX_W-1:0] first_run [$];
    rst_n = 1'b0; seed_load = 1'b0; start = 1'b0;
    seed_main = 16'h3C5A; seed_decoy = 16'hBEEF;
    plaintext = '0; key = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk) seed_load = 1'b1;
    @(negedge clk) seed_load = 1'b0;

    encrypt(128'h3243f6a8_885a308d_313198a2_e0370734, 128'h2b7e1516_28aed2a6_abf71588_09cf4f3c, ct);
    check(ct == 128'h3925841d_02dc09fb_dc118597_196a0b32, $sformatf("FIPS-197 B: %h", ct));
    encrypt(128'h00112233_44556677_8899aabb_ccddeeff, 128'h00010203_04050607_08090a0b_0c0d0e0f, ct);
    check(ct == 128'h69c4e0d8_6a7b0430_d8cdb780_70b4c55a, $sformatf("FIPS-197 C.1: %h", ct));

    // same plaintext and key, many blocks: the set changes, the ciphertext does not
    pt = {$urandom, $urandom, $urandom, $urandom};
    k  = {$urandom, $urandom, $urandom, $urandom};
    encrypt(pt, k, ct1);
    check(ct1 == r_encrypt(pt, k), "fixed block");
    for (int n = 0; n < 16; n++) begin
      logic [ISO_IDX_W-1:0] prev_idx;
      prev_idx = last_idx;
      encrypt(pt, k, ct);
      check(ct == ct1, "same plaintext, same ciphertext");
      if (ct == ct1 && last_idx != prev_idx) n_same_ct_other_set++;
    end

    // random blocks
    for (int n = 0; n < 40; n++) begin
      pt = {$urandom, $urandom, $urandom, $urandom};
      k  = {$urandom, $urandom, $urandom, $urandom};
      encrypt(pt, k, ct);
      check(ct == r_encrypt(pt, k), $sformatf("random block %0d", n));
    end

    // back to back: start held high, a new block is taken in the cycle done rises
    pt = {$urandom, $urandom, $urandom, $urandom};
    k  = {$urandom, $urandom, $urandom, $urandom};
    plaintext = pt; key = k; start = 1'b1;
    for (int n = 0; n < 4; n++) begin
      @(negedge clk);
      while (!done) @(negedge clk);
      check(ciphertext == r_encrypt(pt, k), $sformatf("back-to-back block %0d", n));
      check(ready, "ready with done");
      if (ready && start) n_back_to_back++;
    end
    start = 1'b0;
    @(negedge clk);
    while (!ready) @(negedge clk);

    // seed reload replays the same parameter-set sequence
    @(negedge clk) seed_load = 1'b1;
    @(negedge clk) seed_load = 1'b0;
    idx_log.delete();
    for (int n = 0; n < 8; n++) encrypt(128'(n), 128'h0, ct);
    first_run = idx_log;
    @(negedge clk) seed_load = 1'b1;
    @(negedge clk) seed_load = 1'b0;
    idx_log.delete();
    for (int n = 0; n < 8; n++) encrypt(128'(n), 128'h0, ct);
    check(idx_log == first_run, "seed reload replays the set sequence");
    if (idx_log == first_run) n_replay++;

    $display("mechanisms: set_change=%0d same_ct_other_set=%0d decoy_idx_ok=%0d decoy_written=%0d back_to_back=%0d replay=%0d latency_ok=%0d",
             n_set_change, n_same_ct_other_set, n_decoy_ok, n_decoy_written, n_back_to_back, n_replay, n_latency);
    check(n_set_change > 0, "set change never happened");
    check(n_same_ct_other_set > 0, "same ciphertext under another set never seen");
    check(n_decoy_ok > 0, "decoy selection never seen");
    check(n_decoy_written > 0, "decoy register never written");
    check(n_back_to_back > 0, "back-to-back never happened");
    check(n_replay > 0, "seed replay never happened");
    finish_tb();
  end
endmodule
