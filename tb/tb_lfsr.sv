// tb_lfsr: the LFSR: reset value, seed loading (zero seed replaced by 1), a multi-shift step equals that many single shifts of a reference model, and the default polynomial has the maximal period 2^16-1.
// Ends with one TB_RESULT line; a watchdog stops the run if it hangs.
module tb_lfsr;
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
  logic rst_n;
  logic load, step;
  logic [15:0] seed, st1, st5;

  always #5 clk = ~clk;

  lfsr #(.SHIFTS(1)) dut1 (.clk(clk), .rst_n(rst_n), .load(load), .seed(seed), .step(step), .state(st1));
  lfsr               dut5 (.clk(clk), .rst_n(rst_n), .load(load), .seed(seed), .step(step), .state(st5));

  function automatic logic [15:0] model(logic [15:0] s, int n);
    // x^16 + x^14 + x^13 + x^11 + 1 in Galois form, shifting toward bit 0
    for (int i = 0; i < n; i++) begin
      logic fb;
      fb = s[0];
      s  = s >> 1;
      if (fb) begin
        s[15] = ~s[15]; s[13] = ~s[13]; s[12] = ~s[12]; s[10] = ~s[10];
      end
    end
    return s;
  endfunction

  initial begin
    logic [15:0] exp5, first;
    int period;
    rst_n = 1'b0; load = 1'b0; step = 1'b0; seed = '0;
    #12 rst_n = 1'b1;
    check(st1 == 16'hACE1 && st5 == 16'hACE1, "reset seed");
    @(negedge clk) load = 1'b1; seed = 16'h0000;
    @(negedge clk) load = 1'b0;
    check(st1 == 16'h0001 && st5 == 16'h0001, "zero seed becomes 1");
    @(negedge clk) load = 1'b1; seed = 16'h1234;
    @(negedge clk) load = 1'b0;
    check(st5 == 16'h1234, "seed loaded");
    exp5 = 16'h1234;
    for (int n = 0; n < 200; n++) begin
      step = ($urandom % 3) != 0;
      @(negedge clk);
      if (step) exp5 = model(exp5, 5);
      check(st5 == exp5, $sformatf("5-shift step %0d", n));
    end
    // period with one shift per step
    step = 1'b0;
    @(negedge clk) load = 1'b1; seed = 16'h0001;
    @(negedge clk) load = 1'b0; step = 1'b1;
    first = st1;
    period = 0;
    do begin
      @(negedge clk);
      period++;
    end while (st1 != first && period < 70000);
    check(period == 65535, $sformatf("period %0d", period));
    finish_tb();
  end
endmodule
