// tb_dpa_workload: the side-channel experiment of the published evaluation, reduced to what RTL
// simulation can show.
//
// 1000 blocks (the trace count of the published attack) are encrypted with random plaintexts
// under one fixed key. For each block the testbench records, as a noise-free "leakage", the
// Hamming weight of the tower-field value q = delta * (pt0 ^ k0) inside the first-round S-box of
// byte 0. It then runs a correlation attack on key byte 0: for every guess g the model is the
// Hamming weight of the same value computed with one fixed parameter set (what an attacker who
// knows an unprotected composite-field S-box would predict). Because the core re-draws the set
// for every block, the correct key's correlation must stay well below the value 1.0 that a fixed
// set gives. The same plaintext encrypted again under different sets must give different
// internal values and the same ciphertext. Real power traces are not modelled.
module tb_dpa_workload;
  import gf_pkg::*;
  import aes_ref_pkg::*;

  localparam int N_BLOCKS = 1000;
  localparam int WATCHDOG_CYCLES = 40_000;

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

  // A fixed set, as the attacker's model of an unprotected composite-field S-box.
  logic [ISO_IDX_W-1:0] ridx [1];
  iso_set_t             rset [1];
  iso_rom #(.NREAD(1)) u_rom (.idx(ridx), .set(rset));

  byte_t pt0 [N_BLOCKS];
  int    leak [N_BLOCKS];

  function automatic int hw(byte_t b);
    return $countones(b);
  endfunction

  function automatic real corr(int a [N_BLOCKS], int b [N_BLOCKS]);
    real sa, sb, saa, sbb, sab, n, va, vb;
    sa = 0; sb = 0; saa = 0; sbb = 0; sab = 0; n = N_BLOCKS;
    for (int i = 0; i < N_BLOCKS; i++) begin
      sa += a[i]; sb += b[i]; saa += a[i] * a[i]; sbb += b[i] * b[i]; sab += a[i] * b[i];
    end
    va = saa / n - (sa / n) * (sa / n);
    vb = sbb / n - (sb / n) * (sb / n);
    if (va <= 0 || vb <= 0) return 0.0;
    return (sab / n - (sa / n) * (sb / n)) / $sqrt(va * vb);
  endfunction

  // Encrypt one block and return the S-box-0 tower-field value seen in round 1.
  task automatic encrypt(logic [127:0] pt, logic [127:0] k, output logic [127:0] ct, output byte_t q);
    while (!ready) @(negedge clk);
    plaintext = pt; key = k; start = 1'b1;
    @(negedge clk) start = 1'b0;
    q = dut.u_round.g_sbox[0].u_sbox.q;     // round 1 is being computed in this cycle
    while (!done) @(negedge clk);
    ct = ciphertext;
  endtask

  initial begin
    logic [127:0] k, pt, ct, ct_first;
    byte_t q, q_first;
    gf2_mat8_t d_fixed;
    int model [N_BLOCKS];
    real c, c_best_wrong, c_correct, c_fixed;
    int rank, n_bad_ct, n_q_differs;

    rst_n = 1'b0; seed_load = 1'b0; start = 1'b0;
    seed_main = 16'h0BAD; seed_decoy = 16'hF00D; plaintext = '0; key = '0;
    ridx[0] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    d_fixed = rset[0].delta;

    k = 128'h3c7e1516_28aed2a6_abf71588_09cf4f3c;   // key byte 0 = 8'h3c
    n_bad_ct = 0;
    for (int i = 0; i < N_BLOCKS; i++) begin
      pt = {$urandom, $urandom, $urandom, $urandom};
      encrypt(pt, k, ct, q);
      pt0[i]  = pt[127:120];
      leak[i] = hw(q);
      check(q == r_matmul(dut.set_q.delta, pt[127:120] ^ k[127:120]), "observed value is delta*(pt^k)");
      if (ct != r_encrypt(pt, k)) n_bad_ct++;
    end
    check(n_bad_ct == 0, $sformatf("%0d wrong ciphertexts", n_bad_ct));

    // correlation attack on key byte 0
    c_best_wrong = -1.0; c_correct = 0.0; rank = 0;
    for (int g = 0; g < 256; g++) begin
      for (int i = 0; i < N_BLOCKS; i++) model[i] = hw(r_matmul(d_fixed, pt0[i] ^ 8'(g)));
      c = corr(leak, model);
      if (g == 32'h3c) c_correct = c;
      else if (c > c_best_wrong) c_best_wrong = c;
    end
    for (int g = 0; g < 256; g++) begin
      for (int i = 0; i < N_BLOCKS; i++) model[i] = hw(r_matmul(d_fixed, pt0[i] ^ 8'(g)));
      if (g != 32'h3c && corr(leak, model) > c_correct) rank++;
    end
    // the same attack against a core that always used the fixed set
    for (int i = 0; i < N_BLOCKS; i++) model[i] = hw(r_matmul(d_fixed, pt0[i] ^ 8'h3c));
    c_fixed = corr(model, model);
    $display("CPA over %0d blocks: correct key 3c corr=%.3f (rank %0d of 256), best wrong corr=%.3f; fixed set would give %.3f",
             N_BLOCKS, c_correct, rank, c_best_wrong, c_fixed);
    check(c_fixed > 0.999, "fixed-set model correlates perfectly");
    check(c_correct < 0.5, $sformatf("randomized core leaks with correlation %.3f", c_correct));

    // same plaintext, different sets: same ciphertext, different internal value
    pt = {$urandom, $urandom, $urandom, $urandom};
    encrypt(pt, k, ct_first, q_first);
    n_q_differs = 0;
    for (int i = 0; i < 32; i++) begin
      encrypt(pt, k, ct, q);
      check(ct == ct_first, "same plaintext gives the same ciphertext");
      if (q != q_first) n_q_differs++;
    end
    $display("same plaintext, 32 more blocks: internal S-box value differed in %0d", n_q_differs);
    check(n_q_differs > 16, "internal value changes with the set");
    finish_tb();
  end
endmodule
