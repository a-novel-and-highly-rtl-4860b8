// tb_gf16_sq: exhaustive test of the GF((2^2)^2) squarer; for phi = 2 also the fixed network {q3, q3^q2, q2^q1, q3^q1^q0}.
// Ends with one TB_RESULT line; a watchdog stops the run if it hangs.
module tb_gf16_sq;
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
  gf16_t q, s;
  logic phi_is3;
  gf16_sq dut (.q(q), .phi_is3(phi_is3), .s(s));

  initial begin
    for (int f = 0; f < 2; f++)
      for (int i = 0; i < 16; i++) begin
        q = 4'(i); phi_is3 = f[0];
        #1;
        check(s == r_gf16_mul(q, q, phi_is3 ? 2'd3 : 2'd2), $sformatf("phi3=%0d %h^2 = %h", phi_is3, q, s));
        if (!phi_is3) check(s == {q[3], q[3] ^ q[2], q[2] ^ q[1], q[3] ^ q[1] ^ q[0]}, "phi=2 network");
      end
    finish_tb();
  end
endmodule
