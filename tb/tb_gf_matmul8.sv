// tb_gf_matmul8: the GF(2) matrix-byte product against a bit-by-bit reference, and the published XOR equations of delta and delta^-1 (phi=2, lambda=12) for all 256 bytes.
// Ends with one TB_RESULT line; a watchdog stops the run if it hangs.
module tb_gf_matmul8;
  import gf_pkg::*;
  import aes_ref_pkg::*;

  localparam int WATCHDOG_NS = 1_000_000;
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
  gf2_mat8_t m;
  gf256_t q, o;
  gf_matmul8 dut (.m(m), .q(q), .o(o));

  function automatic gf256_t delta_eq(gf256_t x);
    return {x[7] ^ x[5], x[7] ^ x[6] ^ x[4] ^ x[3] ^ x[2] ^ x[1], x[7] ^ x[5] ^ x[3] ^ x[2],
            x[7] ^ x[5] ^ x[3] ^ x[2] ^ x[1], x[7] ^ x[6] ^ x[2] ^ x[1],
            x[7] ^ x[4] ^ x[3] ^ x[2] ^ x[1], x[6] ^ x[4] ^ x[1], x[6] ^ x[1] ^ x[0]};
  endfunction
  function automatic gf256_t delta_inv_eq(gf256_t x);
    return {x[7] ^ x[6] ^ x[5] ^ x[1], x[6] ^ x[2], x[6] ^ x[5] ^ x[1],
            x[6] ^ x[5] ^ x[4] ^ x[2] ^ x[1], x[5] ^ x[4] ^ x[3] ^ x[2] ^ x[1],
            x[7] ^ x[4] ^ x[3] ^ x[2] ^ x[1], x[5] ^ x[4], x[6] ^ x[5] ^ x[4] ^ x[2] ^ x[0]};
  endfunction

  initial begin
    gf2_mat8_t d, di;
    // the matrices as printed, first row = most significant output bit
    d  = r_mat_rows(8'b10100000, 8'b11011110, 8'b10101100, 8'b10101110,
                    8'b11000110, 8'b10011110, 8'b01010010, 8'b01000011);
    di = r_mat_rows(8'b11100010, 8'b01000100, 8'b01100010, 8'b01110110,
                    8'b00111110, 8'b10011110, 8'b00110000, 8'b01110101);
    for (int i = 0; i < 256; i++) begin
      q = 8'(i);
      m = d;  #1 check(o == delta_eq(q), $sformatf("delta * %h = %h", q, o));
      m = di; #1 check(o == delta_inv_eq(q), $sformatf("delta^-1 * %h = %h", q, o));
    end
    for (int n = 0; n < 500; n++) begin
      m = {$urandom, $urandom};
      q = 8'($urandom);
      #1 check(o == r_matmul(m, q), $sformatf("random matrix * %h = %h", q, o));
    end
    finish_tb();
  end
endmodule
