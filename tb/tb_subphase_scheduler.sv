// tb_subphase_scheduler: feeds (dt, amp) events and rebuilds the expected
// trigger frames from the absolute event times (cycle = t/8 + 1 counted in
// played cycles, sub-phase = t mod 8, amplitudes of one bin added with
// saturation).  Every played frame is compared.  The run exercises:
//   * preload while stopped and a stall on a full ring
//   * several events in one cycle and in one bin (dt = 0), saturation
//   * a late event after the stream ran dry (dropped, counted)
//   * a far-ahead event that stalls the input until the ring reaches it
//   * restart, which clears ring, clock and time base
module tb_subphase_scheduler;
  import sipm_pkg::*;

  localparam int SLOTS = 16;
  localparam int NF = 3000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic run, restart, s_valid, s_ready, out_valid;
  event_t s_data;
  logic [N_PHASES-1:0] out_trig;
  amp_t [N_PHASES-1:0] out_amp;
  logic [31:0] late_count, stall_cycles;

  subphase_scheduler #(.SLOTS(SLOTS)) dut (.*);

  int checks = 0, failures = 0;
  int exp_amp [NF][N_PHASES];
  bit exp_trig [NF][N_PHASES];
  int got_amp [NF][N_PHASES];
  bit got_trig [NF][N_PHASES];
  int nplayed = 0;
  longint t_abs = 0;
  int n_late_expected = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // record what was sent: frame p gets the event unless it is dropped
  task automatic send(int dt, int amp, bit expect_late = 0);
    // called at a falling edge; one event per cycle when s_ready allows
    s_valid = 1; s_data = '{dt: dt_t'(dt), amp: amp_t'(amp)};
    while (!s_ready) @(negedge clk);
    @(posedge clk);
    @(negedge clk);
    s_valid = 0;
    t_abs += longint'(dt);
    if (!expect_late) begin
      int p, k;
      p = int'(t_abs / 8) + 1; k = int'(t_abs % 8);
      if (p < NF) begin
        exp_amp[p][k] = (exp_amp[p][k] + amp > 65535) ? 65535 : exp_amp[p][k] + amp;
        exp_trig[p][k] = 1;
      end
    end else n_late_expected++;
  endtask

  always @(posedge clk) if (rst_n && out_valid && nplayed < NF) begin
    for (int k = 0; k < N_PHASES; k++) begin
      got_amp[nplayed][k] = int'(out_amp[k]);
      got_trig[nplayed][k] = out_trig[k];
    end
    nplayed++;
  end

  task automatic compare(int upto, string tag);
    for (int p = 0; p < upto; p++)
      for (int k = 0; k < N_PHASES; k++) begin
        checks++;
        if (got_amp[p][k] != exp_amp[p][k] || got_trig[p][k] != exp_trig[p][k]) begin
          failures++;
          if (failures < 10) $display("FAIL %s frame %0d phase %0d: %0d/%0b vs %0d/%0b", tag, p, k,
                                      got_amp[p][k], got_trig[p][k], exp_amp[p][k], exp_trig[p][k]);
        end
      end
  endtask

  task automatic clear_model();
    for (int p = 0; p < NF; p++)
      for (int k = 0; k < N_PHASES; k++) begin
        exp_amp[p][k] = 0; exp_trig[p][k] = 0; got_amp[p][k] = 0; got_trig[p][k] = 0;
      end
  endtask

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int stall0;
    run = 0; restart = 0; s_valid = 0; s_data = '0;
    clear_model();
    repeat (2) @(negedge clk);
    rst_n = 1;

    // preload while stopped: events up to 20 cycles ahead, ring holds 16
    send(0, 100);
    send(0, 50);                 // same bin: adds
    send(3, 40000);
    send(0, 40000);              // same bin: saturates
    send(5, 7);                  // next cycle
    for (int i = 0; i < 15; i++) send(6, $urandom_range(1, 3000));
    // this one is beyond the ring while stopped: it waits until play starts
    fork
      send(8 * 10, 4321);
      begin
        repeat (20) @(negedge clk);
        check(stall_cycles > 10, "stalled while the ring was full");
        run = 1;
      end
    join
    // play and keep feeding faster than real time
    for (int i = 0; i < 600; i++) send($urandom_range(0, 24), $urandom_range(1, 3000));

    // stream runs dry; the next close event is late
    repeat (60) @(negedge clk);
    send(1, 1234, 1);
    @(negedge clk);
    check(late_count == 1, $sformatf("late count %0d", late_count));

    // far-ahead event stalls until the ring reaches it
    stall0 = stall_cycles;
    send(8 * 120, 999);
    for (int i = 0; i < 50; i++) send($urandom_range(0, 16), $urandom_range(1, 3000));
    check(stall_cycles > stall0 + 40, "far event stalled");
    repeat (40) @(negedge clk);
    compare(nplayed, "run1");
    check(nplayed > 300, "frames played");

    // restart: new time base, new frames from zero
    @(negedge clk); run = 0; restart = 1;
    @(negedge clk); restart = 0;
    @(negedge clk);
    clear_model();
    nplayed = 0; t_abs = 0;
    fork
      begin repeat (5) @(negedge clk); run = 1; end
      for (int i = 0; i < 200; i++) send($urandom_range(0, 30), $urandom_range(1, 60000));
    join
    repeat (40) @(negedge clk);
    compare(nplayed, "run2");
    check(late_count == 1, "no further late events");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
