// tb_sbox_rand: the randomized S-box for all 256 inputs under every one of the 32 stored parameter sets and under the published example sets, against the AES S-box computed by a^254 and the FIPS-197 affine step. The decoy outputs are checked against affine(M * delta * a^-1) for random matrices M, and equal the real output when M is the working delta^-1.
// Ends with one TB_RESULT line; a watchdog stops the run if it hangs.
module tb_sbox_rand;
  import gf_pkg::*;
  import aes_ref_pkg::*;

  localparam int WATCHDOG_NS = 50_000_000;
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
  gf256_t    x, y, dy0, dy1;
  iso_set_t  set;
  gf2_mat8_t m0, m1;
  byte_t     sbox_tab [256];
  byte_t     inv_tab [256];
  logic [ISO_IDX_W-1:0] ridx [1];
  iso_set_t             rset [1];

  // The stored sets are read from the table itself.
  iso_rom #(.NREAD(1)) u_rom (.idx(ridx), .set(rset));

  // Published example sets (delta rows in decimal as printed; delta^-1 recomputed).
  localparam gf2_mat8_t P212_D  = r_mat_rows(160, 222, 172, 174, 198, 158, 82, 67);
  localparam gf2_mat8_t P212_DI = r_mat_rows(226, 68, 98, 118, 62, 158, 48, 117);
  localparam gf2_mat8_t P215_D  = r_mat_rows(160, 126, 114, 162, 182, 84, 16, 217);
  localparam gf2_mat8_t P215_DI = r_mat_rows(46, 28, 174, 2, 122, 26, 144, 75);
  localparam gf2_mat8_t P310_D  = r_mat_rows(160, 126, 172, 2, 20, 132, 130, 99);
  localparam gf2_mat8_t P212_INV = f_mat_inv(P212_D);
  localparam gf2_mat8_t P215_INV = f_mat_inv(P215_D);
  localparam gf2_mat8_t P310_INV = f_mat_inv(P310_D);

  sbox_rand #(.DECOY(1'b1)) dut (
    .x(x), .set(set), .decoy_inv0(m0), .decoy_inv1(m1), .y(y), .decoy_y0(dy0), .decoy_y1(dy1)
  );

  task automatic run_set(iso_set_t s, string name);
    set = s;
    for (int i = 0; i < 256; i++) begin
      x  = 8'(i);
      m0 = {$urandom, $urandom};
      m1 = {$urandom, $urandom};
      if (i % 4 == 0) m0 = s.delta_inv;   // with the working matrix a decoy equals the output
      #1;
      check(y == sbox_tab[i], $sformatf("%s: S(%h) = %h, expected %h", name, x, y, sbox_tab[i]));
      check(dy0 == r_affine(r_matmul(m0, r_matmul(s.delta, inv_tab[i]))), $sformatf("%s: decoy0(%h)", name, x));
      check(dy1 == r_affine(r_matmul(m1, r_matmul(s.delta, inv_tab[i]))), $sformatf("%s: decoy1(%h)", name, x));
      if (i % 4 == 0) check(dy0 == y, $sformatf("%s: decoy0 with working delta^-1", name));
    end
  endtask

  function automatic iso_set_t paper_set(bit phi3, logic [3:0] lam, gf2_mat8_t d, gf2_mat8_t di);
    iso_set_t s;
    s.phi_is3 = phi3;
    s.lambda = lam;
    s.delta = d;
    s.delta_inv = di;
    return s;
  endfunction

  initial begin
    iso_set_t s;
    for (int i = 0; i < 256; i++) begin
      inv_tab[i]  = r_aes_inv(8'(i));
      sbox_tab[i] = r_affine(inv_tab[i]);
    end
    check(sbox_tab[8'h53] == 8'hed && sbox_tab[8'h00] == 8'h63, "reference S-box sanity");
    for (int k = 0; k < int'(ISO_SETS); k++) begin
      ridx[0] = 5'(k);
      #1 run_set(rset[0], $sformatf("set %0d", k));
    end
    // Published sets (delta rows in the paper's decimal notation); delta^-1 printed in the
    // paper is also checked where it is the true inverse.
    s = paper_set(1'b0, 4'd12, P212_D, P212_INV);
    check(P212_INV == P212_DI, "phi=2 lambda=12 delta^-1");
    run_set(s, "phi=2 lambda=12");
    s = paper_set(1'b0, 4'd15, P215_D, P215_INV);
    check(P215_INV == P215_DI, "phi=2 lambda=15 delta^-1");
    run_set(s, "phi=2 lambda=15");
    s = paper_set(1'b1, 4'd10, P310_D, P310_INV);
    run_set(s, "phi=3 lambda=10");
    finish_tb();
  end
endmodule
