// tb_sat_interp: random 8-sample frames, many outside the 16-bit range.
// Expected: s = clamp(floor(y / 2**16)) and the 16 output samples
// mean(s[k-1], s[k]) (floored), s[k], with s[-1] the last sample of the
// previous frame; 2 cycles of latency.
module tb_sat_interp;
  import sipm_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  state_t [N_PHASES-1:0] y;
  sample_t [N_OUT-1:0] dac;

  sat_interp dut (.*);

  int checks = 0, failures = 0, n_sat = 0;
  localparam int LAT = 2;
  int expd [300][N_OUT];
  int last;

  function automatic int fl2(int a, int b);
    int t;
    t = a + b;
    return (t >= 0) ? t / 2 : -((-t + 1) / 2);
  endfunction

  initial begin : watchdog
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    y = '0; last = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 300 + LAT; c++) begin
      if (c >= LAT) for (int j = 0; j < N_OUT; j++) begin
        checks++;
        if (int'(dac[j]) != expd[c-LAT][j]) begin
          failures++;
          if (failures < 10) $display("FAIL c %0d j %0d: %0d vs %0d", c, j, dac[j], expd[c-LAT][j]);
        end
      end
      if (c < 300) begin
        int s [N_PHASES];
        for (int k = 0; k < N_PHASES; k++) begin
          longint iv;
          iv = longint'($signed(32'($urandom))) >>> ($urandom_range(0, 1) ? 14 : 0);
          y[k] = state_t'((iv <<< 16) + longint'($urandom_range(0, 65535)));
          s[k] = (iv > 32767) ? 32767 : (iv < -32768) ? -32768 : int'(iv);
          if (iv > 32767 || iv < -32768) n_sat++;
        end
        for (int k = 0; k < N_PHASES; k++) begin
          expd[c][2*k]   = fl2(k == 0 ? last : s[k-1], s[k]);
          expd[c][2*k+1] = s[k];
        end
        last = s[N_PHASES-1];
      end
      @(negedge clk);
    end
    checks++;
    if (n_sat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
