// tb_event_source_mux: two random event streams with random back-pressure
// downstream; the selection switches between the sources while they are
// idle.  Every event of the selected source must come out once, in order;
// the unselected source must see ready low; the counters must match.
module tb_event_source_mux;
  import sipm_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic sel_udp, ps_valid, ps_ready, udp_valid, udp_ready, m_valid, m_ready;
  event_t ps_data, udp_data, m_data;
  logic [31:0] cnt_ps, cnt_udp;

  event_source_mux dut (.*);

  int checks = 0, failures = 0, n_ps = 0, n_udp = 0, switches = 0;
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
    sel_udp = 0; ps_valid = 0; udp_valid = 0; m_ready = 0;
    ps_data = '0; udp_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      // switch source every 500 cycles, with both sources idle
      if (c % 500 == 499) begin
        ps_valid = 0; udp_valid = 0;
        sel_udp = ~sel_udp; switches++;
      end else begin
        if (!ps_valid || ps_ready) begin
          ps_valid = $urandom_range(0, 1);
          ps_data = '{dt: dt_t'($urandom), amp: amp_t'($urandom)};
        end
        if (!udp_valid || udp_ready) begin
          udp_valid = $urandom_range(0, 1);
          udp_data = '{dt: dt_t'($urandom), amp: amp_t'($urandom)};
        end
      end
      m_ready = $urandom_range(0, 3) != 0;
      #1;
      check(sel_udp ? !ps_ready : !udp_ready, "unselected source held off");
      @(posedge clk);
      if (m_valid && m_ready) begin
        check(q.size() > 0 && m_data == q[0], "order");
        if (q.size() > 0) void'(q.pop_front());
      end
      if (ps_valid && ps_ready)   begin q.push_back(ps_data);  n_ps++;  end
      if (udp_valid && udp_ready) begin q.push_back(udp_data); n_udp++; end
    end
    @(negedge clk);
    check(cnt_ps == n_ps && cnt_udp == n_udp, $sformatf("counters %0d/%0d vs %0d/%0d", cnt_ps, cnt_udp, n_ps, n_udp));
    check(n_ps > 100 && n_udp > 100 && switches > 2, "both sources used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
