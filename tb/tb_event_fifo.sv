// tb_event_fifo: random pushes and pops against a queue scoreboard at a
// small depth, including runs to full and to empty.  Checks data order,
// the level count and the full/empty flags.
module tb_event_fifo;
  import sipm_pkg::*;

  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic s_valid, s_ready, m_valid, m_ready;
  event_t s_data, m_data;
  logic [$clog2(DEPTH):0] level;

  event_fifo #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, n_full = 0, n_empty = 0;
  event_t q [$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    s_valid = 0; m_ready = 0; s_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      int phase;
      phase = (c / 300) % 3;    // fill-biased, drain-biased, balanced
      @(negedge clk);
      check(int'(level) == q.size(), $sformatf("level %0d vs %0d", level, q.size()));
      check(s_ready == (q.size() < DEPTH), "s_ready");
      check(m_valid == (q.size() > 0), "m_valid");
      if (q.size() == DEPTH) n_full++;
      if (q.size() == 0) n_empty++;
      if (m_valid) check(m_data == q[0], "data order");
      s_valid = $urandom_range(0, 9) < (phase == 0 ? 8 : phase == 1 ? 2 : 5);
      m_ready = $urandom_range(0, 9) < (phase == 0 ? 2 : phase == 1 ? 8 : 5);
      s_data = '{dt: dt_t'($urandom), amp: amp_t'($urandom)};
      @(posedge clk);
      if (m_valid && m_ready) void'(q.pop_front());
      if (s_valid && s_ready) q.push_back(s_data);
    end
    check(n_full > 0 && n_empty > 0, "reached full and empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
