// tb_trigger_interface: random triggers, amplitudes and valid flags; the
// impulse frame must equal the amplitudes masked by trigger and valid one
// cycle later, and the previous frame must follow one cycle behind it.
module tb_trigger_interface;
  import sipm_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  logic [N_PHASES-1:0] trig;
  amp_t [N_PHASES-1:0] amp, x_cur, x_prev;

  trigger_interface dut (.*);

  int checks = 0, failures = 0;
  amp_t [N_PHASES-1:0] exp1, exp2;
  logic v1;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; trig = '0; amp = '0; exp1 = '0; exp2 = '0; v1 = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 500; c++) begin
      @(negedge clk);
      checks++;
      if (x_cur !== exp1 || x_prev !== exp2 || out_valid !== v1) begin
        failures++;
        $display("FAIL cycle %0d", c);
      end
      in_valid = $urandom_range(0, 3) != 0;
      trig = N_PHASES'($urandom);
      for (int k = 0; k < N_PHASES; k++) amp[k] = amp_t'($urandom);
      exp2 = exp1;
      for (int k = 0; k < N_PHASES; k++) exp1[k] = (in_valid && trig[k]) ? amp[k] : '0;
      v1 = in_valid;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
