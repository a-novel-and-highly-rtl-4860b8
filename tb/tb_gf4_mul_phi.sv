// tb_gf4_mul_phi: multiply-by-phi for both phi values, against the reference product and the published equations (phi=2: k1=q1^q0, k0=q1; phi=3: k1=q0, k0=q1^q0).
// Ends with one TB_RESULT line; a watchdog stops the run if it hangs.
module tb_gf4_mul_phi;
  import gf_pkg::*;
  import aes_ref_pkg::*;

  localparam int WATCHDOG_NS = 100_000;
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
  gf4_t q, k;
  logic phi_is3;
  gf4_mul_phi dut (.q(q), .phi_is3(phi_is3), .k(k));

  initial begin
    for (int f = 0; f < 2; f++)
      for (int i = 0; i < 4; i++) begin
        q = 2'(i); phi_is3 = f[0];
        #1;
        check(k == r_gf4_mul(q, phi_is3 ? 2'd3 : 2'd2), $sformatf("q=%0d phi3=%0d k=%0d", q, phi_is3, k));
        if (phi_is3) check(k == {q[0], q[1] ^ q[0]}, "phi=3 equation");
        else         check(k == {q[1] ^ q[0], q[1]}, "phi=2 equation");
      end
    finish_tb();
  end
endmodule
