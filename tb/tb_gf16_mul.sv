// tb_gf16_mul: exhaustive test of the GF((2^2)^2) multiplier for phi = 2 and 3.
// Ends with one TB_RESULT line; a watchdog stops the run if it hangs.
module tb_gf16_mul;
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
  gf16_t a, b, p;
  logic phi_is3;
  gf16_mul dut (.a(a), .b(b), .phi_is3(phi_is3), .p(p));

  initial begin
    for (int f = 0; f < 2; f++)
      for (int i = 0; i < 16; i++)
        for (int j = 0; j < 16; j++) begin
          a = 4'(i); b = 4'(j); phi_is3 = f[0];
          #1 check(p == r_gf16_mul(a, b, phi_is3 ? 2'd3 : 2'd2),
                   $sformatf("phi3=%0d %h*%h = %h", phi_is3, a, b, p));
        end
    finish_tb();
  end
endmodule
