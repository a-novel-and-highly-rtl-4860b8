// tb_gf16_inv: exhaustive test of the GF((2^2)^2) inverter: q * inv(q) = 1, inv(0) = 0.
// Ends with one TB_RESULT line; a watchdog stops the run if it hangs.
module tb_gf16_inv;
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
  gf16_t q, r;
  logic phi_is3;
  gf16_inv dut (.q(q), .phi_is3(phi_is3), .r(r));

  initial begin
    for (int f = 0; f < 2; f++)
      for (int i = 0; i < 16; i++) begin
        q = 4'(i); phi_is3 = f[0];
        #1 check(r == r_gf16_inv(q, phi_is3 ? 2'd3 : 2'd2), $sformatf("phi3=%0d inv(%h) = %h", phi_is3, q, r));
      end
    finish_tb();
  end
endmodule
