// tb_preconv_bank: random impulse frames against a bit-exact integer
// model of the pre-convolution: lane k sums x_(k-d)*M^d over d = 0..7,
// taking x from the previous frame when k-d < 0, each product truncated
// to 16 fraction bits.  Also checks the 4-cycle latency.
module tb_preconv_bank;
  import sipm_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  bank_coef_t coef;
  amp_t [N_PHASES-1:0] x_cur, x_prev;
  state_t [N_PHASES-1:0] v;

  preconv_bank dut (.*);

  int checks = 0, failures = 0;
  localparam int LAT = 4;
  longint expv [600][N_PHASES];

  initial begin : watchdog
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint mm;
    mm = longint'($floor($exp(-0.8 / 3.0) * 134217728.0));
    coef = '0;
    coef.pow[1] = coef_t'(mm);
    for (int d = 2; d < N_PHASES; d++) coef.pow[d] = coef_t'((longint'(coef.pow[d-1]) * mm) >>> 27);
    x_cur = '0; x_prev = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 500 + LAT; c++) begin
      @(negedge clk);
      if (c >= LAT) begin
        for (int k = 0; k < N_PHASES; k++) begin
          checks++;
          if (longint'(v[k]) != expv[c-LAT][k]) begin
            failures++;
            if (failures < 10) $display("FAIL c %0d lane %0d: %0d vs %0d", c, k, v[k], expv[c-LAT][k]);
          end
        end
      end
      if (c < 500) begin
        x_prev = x_cur;
        for (int k = 0; k < N_PHASES; k++)
          x_cur[k] = ($urandom_range(0, 2) == 0) ? amp_t'($urandom) : '0;
        for (int k = 0; k < N_PHASES; k++) begin
          longint s;
          s = longint'(x_cur[k]) << 16;
          for (int d = 1; d < N_PHASES; d++) begin
            longint x;
            x = (k - d >= 0) ? longint'(x_cur[k-d]) : longint'(x_prev[k-d+8]);
            s += (x * longint'(coef.pow[d])) >>> 11;
          end
          expv[c][k] = s;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
