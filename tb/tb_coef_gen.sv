// tb_coef_gen: checks the coefficient generator of one bank.
// The expected powers are computed here with 64-bit integers as the
// truncated chain p[d] = floor(p[d-1]*M / 2**27), and each is also held
// against exp(-0.8*d/tau) within a small tolerance.  Also checked: the
// busy time of a load (15 cycles after the load cycle), that the output
// set does not change while a new set is being computed, and reset to 0.
module tb_coef_gen;
  import sipm_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load, busy;
  coef_t m;
  bank_coef_t coef;

  coef_gen dut (.*);

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic load_and_check(real tau);
    longint p [17];
    int busy_cycles;
    bank_coef_t prev_set;
    m = coef_t'(longint'($floor($exp(-0.8 / tau) * 134217728.0)));
    p[1] = longint'(m);
    for (int d = 2; d <= 16; d++) p[d] = (p[d-1] * longint'(m)) >>> 27;
    prev_set = coef;
    @(negedge clk); load = 1;
    @(negedge clk); load = 0;
    busy_cycles = 0;
    while (busy) begin
      check(coef == prev_set, "coefficients changed while busy");
      busy_cycles++;
      @(negedge clk);
    end
    check(busy_cycles == 15, $sformatf("busy for %0d cycles", busy_cycles));
    for (int d = 1; d < 8; d++) begin
      real ideal;
      ideal = $exp(-0.8 * d / tau) * 134217728.0;
      check(longint'(coef.pow[d]) == p[d], $sformatf("pow[%0d] %0d vs %0d", d, coef.pow[d], p[d]));
      check(real'(coef.pow[d]) - ideal < 40.0 && ideal - real'(coef.pow[d]) < 40.0, "pow vs exp");
    end
    check(longint'(coef.p1) == p[8],  "p1 = M^8");
    check(longint'(coef.p2) == p[16], "p2 = M^16");
    check(real'(coef.p2) - $exp(-12.8 / tau) * 134217728.0 < 80.0 &&
          $exp(-12.8 / tau) * 134217728.0 - real'(coef.p2) < 80.0, "p2 vs exp");
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load = 0; m = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(coef == '0 && !busy, "reset state");
    load_and_check(1.0);
    load_and_check(50.0);
    load_and_check(100.0);
    load_and_check(1000.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
