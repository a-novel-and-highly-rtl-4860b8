// tb_aes_round: one encryption round (normal and last) on random states, round keys and parameter sets, against the reference round; the 32 decoy bytes are checked against affine(M * delta * a^-1) for the two decoy matrices. Also the first round of the FIPS-197 example.
// Ends with one TB_RESULT line; a watchdog stops the run if it hangs.
module tb_aes_round;
  import gf_pkg::*;
  import aes_ref_pkg::*;

  localparam int WATCHDOG_NS = 20_000_000;
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

  initial begin : watchdog
    #(WATCHDOG_NS);
    failures++;
    $display("FAIL: watchdog expired");
    finish_tb();
  end
  logic [127:0] st, rk, st_out;
  logic last;
  iso_set_t set;
  gf2_mat8_t m0, m1;
  logic [1:0][127:0] decoy;
  iso_set_t tbl [ISO_SETS];
  int unsigned k;
  logic [ISO_IDX_W-1:0] ridx [1];
  iso_set_t             rset [1];

  iso_rom #(.NREAD(1)) u_rom (.idx(ridx), .set(rset));

  aes_round dut (.st(st), .rk(rk), .last(last), .set(set), .decoy_inv0(m0), .decoy_inv1(m1),
                 .st_out(st_out), .decoy(decoy));

  initial begin
    for (int s = 0; s < int'(ISO_SETS); s++) begin
      ridx[0] = 5'(s);
      #1 tbl[s] = rset[0];
    end
    // FIPS-197 Appendix B, round 1: start 193de3be..., round key a0fafe17..., result a49c7ff2...
    st = 128'h193de3be_a0f4e22b_9ac68d2a_e9f84808;
    rk = 128'ha0fafe17_88542cb1_23a33939_2a6c7605;
    last = 1'b0; set = tbl[5]; m0 = '0; m1 = '0;
    #1 check(st_out == 128'ha49c7ff2_689f352b_6b5bea43_026a5049, $sformatf("FIPS round 1: %h", st_out));
    for (int n = 0; n < 300; n++) begin
      st   = {$urandom, $urandom, $urandom, $urandom};
      rk   = {$urandom, $urandom, $urandom, $urandom};
      last = ($urandom % 4) == 0;
      k    = $urandom % ISO_SETS;   // draw once, then index
      set  = tbl[k];
      m0   = {$urandom, $urandom};
      m1   = {$urandom, $urandom};
      #1;
      check(st_out == r_round(st, rk, last), $sformatf("round last=%0d on %h", last, st));
      for (int b = 0; b < 16; b++) begin
        byte_t inv_b;
        inv_b = r_matmul(set.delta, r_aes_inv(st[127 - 8 * b -: 8]));
        check(decoy[0][127 - 8 * b -: 8] == r_affine(r_matmul(m0, inv_b)) &&
              decoy[1][127 - 8 * b -: 8] == r_affine(r_matmul(m1, inv_b)), $sformatf("decoy byte %0d", b));
      end
    end
    finish_tb();
  end
endmodule
