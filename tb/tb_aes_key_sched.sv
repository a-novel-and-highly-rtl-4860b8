// tb_aes_key_sched: the on-the-fly key schedule. For the FIPS-197 key and for random keys it loads the key and advances ten times, changing the S-box parameter set at random every cycle, and compares each next round key with a reference key expansion (FIPS-197: round key 10 = d014f9a8c9ee2589e13f0cc8b6630ca6).
// Ends with one TB_RESULT line; a watchdog stops the run if it hangs.
module tb_aes_key_sched;
  import gf_pkg::*;
  import aes_ref_pkg::*;

  localparam int WATCHDOG_NS = 20_000_000;
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
  logic clk = 1'b0;
  logic rst_n, load, advance;
  logic [127:0] key, rk_next;
  iso_set_t set;
  iso_set_t tbl [ISO_SETS];
  logic [ISO_IDX_W-1:0] ridx [1];
  iso_set_t             rset [1];

  iso_rom #(.NREAD(1)) u_rom (.idx(ridx), .set(rset));

  always #5 clk = ~clk;

  aes_key_sched dut (.clk(clk), .rst_n(rst_n), .load(load), .key(key), .advance(advance),
                     .set(set), .rk_next(rk_next));

  task automatic run_key(logic [127:0] k);
    keys_t ref_keys;
    int unsigned ks;
    ref_keys = r_expand(k);
    @(negedge clk) load = 1'b1; key = k;
    @(negedge clk) load = 1'b0;
    for (int r = 1; r <= 10; r++) begin
      ks  = $urandom % ISO_SETS;   // draw once, then index
      set = tbl[ks];
      #1 check(rk_next == ref_keys[r], $sformatf("key %h round %0d: %h", k, r, rk_next));
      advance = 1'b1;
      @(negedge clk) advance = 1'b0;
      if ($urandom % 2) @(negedge clk);   // idle cycles must hold the key
    end
  endtask

  initial begin
    keys_t fk;
    for (int s = 0; s < int'(ISO_SETS); s++) begin
      ridx[0] = 5'(s);
      #1 tbl[s] = rset[0];
    end
    fk = r_expand(128'h2b7e1516_28aed2a6_abf71588_09cf4f3c);
    check(fk[10] == 128'hd014f9a8_c9ee2589_e13f0cc8_b6630ca6, "reference key expansion");
    set = tbl[0];
    rst_n = 1'b0; load = 1'b0; advance = 1'b0; key = '0;
    #12 rst_n = 1'b1;
    run_key(128'h2b7e1516_28aed2a6_abf71588_09cf4f3c);
    for (int n = 0; n < 20; n++) run_key({$urandom, $urandom, $urandom, $urandom});
    finish_tb();
  end
endmodule
