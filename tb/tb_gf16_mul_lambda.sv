// tb_gf16_mul_lambda: multiply-by-lambda for all 16 (phi, lambda) pairs, plus the published equations for phi=2, lambda=12 (k3=q2^q0, k2=q3^q2^q1^q0, k1=q3, k0=q2).
// Ends with one TB_RESULT line; a watchdog stops the run if it hangs.
module tb_gf16_mul_lambda;
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
  gf16_t q, lambda, k;
  logic phi_is3;
  gf16_mul_lambda dut (.q(q), .phi_is3(phi_is3), .lambda(lambda), .k(k));

  initial begin
    for (int f = 0; f < 2; f++)
      for (int l = 8; l < 16; l++)
        for (int i = 0; i < 16; i++) begin
          q = 4'(i); lambda = 4'(l); phi_is3 = f[0];
          #1;
          check(k == r_gf16_mul(q, lambda, phi_is3 ? 2'd3 : 2'd2),
                $sformatf("phi3=%0d lambda=%0d q=%h k=%h", phi_is3, lambda, q, k));
          if (!phi_is3 && lambda == 4'd12)
            check(k == {q[2] ^ q[0], q[3] ^ q[2] ^ q[1] ^ q[0], q[3], q[2]}, "equation (5)");
        end
    finish_tb();
  end
endmodule
