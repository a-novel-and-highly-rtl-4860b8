// tb_iso_rom: every entry of the parameter table read through all three ports: phi and lambda follow the index, delta is a field isomorphism from the AES field to the tower field (checked on random products), delta^-1 is its inverse, and all entries differ. The construction is also checked to reproduce the published delta matrices.
// Ends with one TB_RESULT line; a watchdog stops the run if it hangs.
module tb_iso_rom;
  import gf_pkg::*;
  import aes_ref_pkg::*;

  localparam int WATCHDOG_NS = 10_000_000;
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
  logic [ISO_IDX_W-1:0] idx [3];
  iso_set_t             set [3];
  iso_set_t             seen [ISO_SETS];
  iso_set_t             seen1 [ISO_SETS];
  iso_set_t             seen2 [ISO_SETS];
  localparam gf2_mat8_t D212 = f_delta(2'd2, 4'd12, 8'd95);
  localparam gf2_mat8_t D215 = f_delta(2'd2, 4'd15, 8'd120);
  localparam gf2_mat8_t D310 = f_delta(2'd3, 4'd10, 8'd83);

  iso_rom #(.NREAD(3)) dut (.idx(idx), .set(set));

  initial begin
    for (int s = 0; s < int'(ISO_SETS); s++) begin
      idx[0] = 5'(s); idx[1] = 5'(s + 7); idx[2] = 5'(s + 19);
      #1;
      seen[s] = set[0];
      check(set[0].phi_is3 == s[4], $sformatf("set %0d phi", s));
      check(set[0].lambda == 4'(8 + s[3:1]), $sformatf("set %0d lambda", s));
      for (int n = 0; n < 64; n++) begin
        byte_t a, b;
        a = 8'($urandom); b = 8'($urandom);
        check(r_matmul(set[0].delta, r_aes_mul(a, b)) ==
              r_gfb_mul(r_matmul(set[0].delta, a), r_matmul(set[0].delta, b),
                        set[0].phi_is3 ? 2'd3 : 2'd2, set[0].lambda),
              $sformatf("set %0d: delta(a*b) = delta(a)*delta(b) for %h %h", s, a, b));
      end
      for (int i = 0; i < 8; i++)
        check(r_matmul(set[0].delta_inv, r_matmul(set[0].delta, 8'(1 << i))) == 8'(1 << i),
              $sformatf("set %0d: delta^-1 delta", s));
      seen1[5'(s + 7)]  = set[1];
      seen2[5'(s + 19)] = set[2];
    end
    for (int s = 0; s < int'(ISO_SETS); s++)
      check(seen1[s] == seen[s] && seen2[s] == seen[s], $sformatf("ports 1, 2 at set %0d", s));
    for (int s = 0; s < int'(ISO_SETS); s++)
      for (int t = s + 1; t < int'(ISO_SETS); t++)
        check(seen[s].delta != seen[t].delta, $sformatf("sets %0d and %0d differ", s, t));
    // Construction against the published matrices: beta is the image of the AES generator,
    // i.e. row bits of column 1 of delta (phi=2 lambda=12: 95, phi=2 lambda=15: 120,
    // phi=3 lambda=10: 83).
    check(D212 == r_mat_rows(160, 222, 172, 174, 198, 158, 82, 67), "published delta 2/12");
    check(D215 == r_mat_rows(160, 126, 114, 162, 182, 84, 16, 217), "published delta 2/15");
    check(D310 == r_mat_rows(160, 126, 172, 2, 20, 132, 130, 99), "published delta 3/10");
    finish_tb();
  end
endmodule
