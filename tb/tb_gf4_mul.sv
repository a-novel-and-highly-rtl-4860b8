// tb_gf4_mul: exhaustive test of the GF(2^2) multiplier against a schoolbook product mod x^2+x+1.
// Ends with one TB_RESULT line; a watchdog stops the run if it hangs.
module tb_gf4_mul;
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
  gf4_t a, b, p;
  gf4_mul dut (.a(a), .b(b), .p(p));

  initial begin
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++) begin
        a = 2'(i); b = 2'(j);
        #1 check(p == r_gf4_mul(a, b), $sformatf("%0d*%0d = %0d", a, b, p));
      end
    finish_tb();
  end
endmodule
