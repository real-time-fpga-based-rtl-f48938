// tb_weighted_combiner: random bank outputs and slow fractions; the result
// must be (1-S_f)*y_ff + S_f*y_fs - y_r (computed here in double precision,
// S_f clamped to 1.0) within one fraction LSB, 3 cycles after the inputs.
module tb_weighted_combiner;
  import sipm_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  sf_t sf;
  state_t [N_PHASES-1:0] y_r, y_ff, y_fs, y_out;

  weighted_combiner dut (.*);

  int checks = 0, failures = 0;
  localparam int LAT = 3;
  real expv [300][N_PHASES];

  initial begin : watchdog
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sf = '0; y_r = '0; y_ff = '0; y_fs = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 300 + LAT; c++) begin
      if (c >= LAT) for (int k = 0; k < N_PHASES; k++) begin
        real d;
        d = real'(y_out[k]) - expv[c-LAT][k];
        checks++;
        if (d > 1.5 || d < -1.5) begin
          failures++;
          if (failures < 10) $display("FAIL c %0d lane %0d %0d vs %f", c, k, y_out[k], expv[c-LAT][k]);
        end
      end
      if (c < 300) begin
        real w;
        // S_f changes only between blocks of cycles, as a register would
        if (c % 50 == 0) sf = (c == 250) ? sf_t'(18'h3_0000) : sf_t'($urandom_range(0, 1 << 17));
        w = real'(sf) / 131072.0;
        if (w > 1.0) w = 1.0;
        for (int k = 0; k < N_PHASES; k++) begin
          y_r[k]  = state_t'($signed(32'($urandom)) * 64'sd256);
          y_ff[k] = state_t'($signed(32'($urandom)) * 64'sd256);
          y_fs[k] = state_t'($signed(32'($urandom)) * 64'sd256);
          expv[c][k] = (1.0 - w) * real'(y_ff[k]) + w * real'(y_fs[k]) - real'(y_r[k]);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
