// tb_iir_bank: eight look-ahead lanes against the plain one-pole
// recursion y[n] = P*y[n-1] + v[n] evaluated in double precision.  The
// look-ahead form must keep the same pole and impulse response: every
// lane gets a different random input stream, and outputs must agree to
// within a fraction of an output LSB.  Also checks the 3-cycle latency
// of an isolated impulse.
module tb_iir_bank;
  import sipm_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  bank_coef_t coef;
  state_t [N_PHASES-1:0] v, y;

  iir_bank dut (.*);

  int checks = 0, failures = 0;
  localparam int LAT = 3;
  localparam int N = 400;
  real yref [N][N_PHASES];
  real st [N_PHASES];
  real P;

  initial begin : watchdog
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int first;
    coef = '0;
    coef.p1 = coef_t'(longint'($floor($exp(-6.4 / 50.0) * 134217728.0)));
    coef.p2 = coef_t'((longint'(coef.p1) * longint'(coef.p1)) >>> 27);
    P = real'(coef.p1) / 134217728.0;
    v = '0;
    for (int k = 0; k < N_PHASES; k++) st[k] = 0.0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // latency: one impulse on lane 2
    @(negedge clk); v[2] = state_t'(64'd1000 << FRAC);
    @(negedge clk); v = '0;
    first = -1;
    for (int c = 1; c < 10; c++) begin
      if (first < 0 && y[2] != 0) first = c;
      @(negedge clk);
    end
    checks++;
    if (first != LAT) begin failures++; $display("FAIL latency %0d", first); end
    // flush
    rst_n = 0; @(negedge clk); rst_n = 1;
    for (int c = 0; c < N + LAT; c++) begin
      if (c >= LAT) begin
        for (int k = 0; k < N_PHASES; k++) begin
          real d;
          d = real'(y[k]) / 65536.0 - yref[c-LAT][k];
          checks++;
          if (d > 0.01 || d < -0.01) begin
            failures++;
            if (failures < 10) $display("FAIL c %0d lane %0d: %f vs %f", c, k, real'(y[k]) / 65536.0, yref[c-LAT][k]);
          end
        end
      end
      if (c < N) begin
        for (int k = 0; k < N_PHASES; k++) begin
          longint x;
          x = ($urandom_range(0, 7) == 0) ? longint'($urandom_range(0, 1 << 24)) : 0;
          if (c > N - 60) x = 0;     // let the tails decay
          v[k] = state_t'(x);
          st[k] = P * st[k] + real'(x) / 65536.0;
          yref[c][k] = st[k];
        end
      end else v = '0;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
