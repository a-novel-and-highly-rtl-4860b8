// tb_mix_columns: MixColumns on the FIPS-197 / standard test columns and on random states against a reference built with a generic field multiply.
// Ends with one TB_RESULT line; a watchdog stops the run if it hangs.
module tb_mix_columns;
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
  logic [127:0] st_in, st_out;
  mix_columns dut (.st_in(st_in), .st_out(st_out));

  initial begin
    st_in = 128'hdb135345_f20a225c_01010101_c6c6c6c6;
    #1 check(st_out == 128'h8e4da1bc_9fdc589d_01010101_c6c6c6c6, $sformatf("vector 1: %h", st_out));
    st_in = 128'hd4d4d4d5_2d26314c_d4bf5d30_e0b452ae;
    #1 check(st_out == 128'hd5d5d7d6_4d7ebdf8_046681e5_e0cb199a, $sformatf("vector 2: %h", st_out));
    for (int n = 0; n < 300; n++) begin
      st_in = {$urandom, $urandom, $urandom, $urandom};
      #1 check(st_out == r_mixcolumns(st_in), $sformatf("random %h", st_in));
    end
    finish_tb();
  end
endmodule
