// tb_sipm_emulator_top: end-to-end test of one emulator channel at its
// default sizes.
//
// Events are produced here the way the host software would: photon hits
// with continuous time stamps are binned into 0.8 ns sub-phases, bins of
// one sub-phase are summed, and the non-empty bins are sent as (dt, amp)
// pairs.  Three workloads:
//   1. one 20-photoelectron event pushed by the processing system over
//      AXI4-Lite (tau_r = 1 ns, tau_ff = 50 ns, tau_fs = 100 ns, S_f = 0.2)
//   2. pile-up: 20, 15 and 25 photoelectrons at 10, 80 and 200 ns,
//      streamed through the UDP port after switching the source
//   3. after reloading a scintillator-like shape, a saturating pulse and
//      a late event
// Every DAC sample is compared with a double-precision model of the same
// binned input (within 2 LSB); samples on the body of each pulse are also
// compared with the ideal unbinned response (within 2 %).  The mechanisms
// source switch, ring stall, late drop, bin merge, shape reload,
// saturation and FIFO buffering are counted; one that never happens fails.
module tb_sipm_emulator_top;
  import sipm_pkg::*;

  localparam int LAT = 13;
  localparam int NQ  = 160;         // frames compared per workload
  localparam real PE = 800.0;       // LSB per photoelectron

  logic clk = 0, rst_n = 0;
  always #3.2 clk = ~clk;

  logic [7:0]  s_axil_awaddr, s_axil_araddr;
  logic        s_axil_awvalid, s_axil_awready, s_axil_wvalid, s_axil_wready;
  logic [31:0] s_axil_wdata, s_axil_rdata;
  logic [3:0]  s_axil_wstrb;
  logic [1:0]  s_axil_bresp, s_axil_rresp;
  logic        s_axil_bvalid, s_axil_bready, s_axil_arvalid, s_axil_arready;
  logic        s_axil_rvalid, s_axil_rready;
  logic        udp_valid, udp_ready;
  event_t      udp_data;
  logic        dac_valid;
  sample_t [N_OUT-1:0] dac;

  sipm_emulator_top dut (.*);

  int checks = 0, failures = 0;
  int n_switch = 0, n_stall = 0, n_late = 0, n_merge = 0, n_reload = 0, n_sat = 0, n_fifo = 0;

  // current workload: hits (continuous) and bins (quantized)
  real hit_t [$];
  real hit_a [$];
  int  bin_m [$];
  int  bin_a [$];
  real tr, tff, tfs, sfv;           // shape as programmed (quantized)

  // captured DAC frames
  int cap [NQ][N_OUT];
  int ncap = 0;
  bit capturing = 0;
  always @(posedge clk) if (capturing && dac_valid && ncap < NQ) begin
    for (int j = 0; j < N_OUT; j++) cap[ncap][j] = int'(dac[j]);
    ncap++;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // ---------------------------------------------------------------- AXI
  task automatic axi_write(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    s_axil_awaddr = a; s_axil_wdata = d; s_axil_awvalid = 1; s_axil_wvalid = 1;
    do @(posedge clk); while (!(s_axil_awready && s_axil_wready));
    @(negedge clk);
    s_axil_awvalid = 0; s_axil_wvalid = 0;
    s_axil_bready = 1;
    while (!s_axil_bvalid) @(negedge clk);
    @(negedge clk);
    s_axil_bready = 0;
  endtask

  task automatic axi_read(logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    s_axil_araddr = a; s_axil_arvalid = 1;
    do @(posedge clk); while (!s_axil_arready);
    @(negedge clk);
    s_axil_arvalid = 0;
    while (!s_axil_rvalid) @(negedge clk);
    d = s_axil_rdata;
    s_axil_rready = 1;
    @(negedge clk);
    s_axil_rready = 0;
  endtask

  task automatic set_shape(real r, real ff, real fs, real s);
    logic [31:0] st;
    coef_t c;
    c = coef_t'(longint'($floor($exp(-0.8 / r) * 134217728.0)));   axi_write(8'h04, 32'(c));
    tr = -0.8 / $ln(real'(c) / 134217728.0);
    c = coef_t'(longint'($floor($exp(-0.8 / ff) * 134217728.0)));  axi_write(8'h08, 32'(c));
    tff = -0.8 / $ln(real'(c) / 134217728.0);
    c = coef_t'(longint'($floor($exp(-0.8 / fs) * 134217728.0)));  axi_write(8'h0C, 32'(c));
    tfs = -0.8 / $ln(real'(c) / 134217728.0);
    axi_write(8'h10, 32'(int'(s * 131072.0)));
    sfv = real'(int'(s * 131072.0)) / 131072.0;
    axi_write(8'h00, 32'h4);                    // load, run off
    do axi_read(8'h1C, st); while (st[0]);
    n_reload++;
  endtask

  // --------------------------------------------------------- workloads
  task automatic clear_workload();
    hit_t.delete(); hit_a.delete(); bin_m.delete(); bin_a.delete();
  endtask

  // n photoelectrons at time t0 (ns); photon arrival spread over a few ns
  task automatic add_event(int n, real t0);
    for (int i = 0; i < n; i++) begin
      hit_t.push_back(t0 + real'($urandom_range(0, 3000)) / 1000.0);
      hit_a.push_back(PE);
    end
  endtask

  // temporal quantization, as done upstream in software
  task automatic quantize();
    int acc [int];
    foreach (hit_t[i]) begin
      int m;
      m = int'($floor(hit_t[i] / 0.8));
      if (acc.exists(m)) begin acc[m] += int'(hit_a[i]); n_merge++; end
      else acc[m] = int'(hit_a[i]);
    end
    foreach (acc[m]) begin
      bin_m.push_back(m);
      bin_a.push_back(acc[m] > 65535 ? 65535 : acc[m]);
    end
  endtask

  task automatic send_bins(bit via_udp);
    int prev;
    prev = 0;
    foreach (bin_m[i]) begin
      if (via_udp) begin
        @(negedge clk);
        udp_valid = 1;
        udp_data = '{dt: dt_t'(bin_m[i] - prev), amp: amp_t'(bin_a[i])};
        while (!udp_ready) @(negedge clk);
        @(posedge clk);
        @(negedge clk);
        udp_valid = 0;
      end else begin
        axi_write(8'h14, 32'(bin_m[i] - prev));
        axi_write(8'h18, 32'(bin_a[i]));
      end
      prev = bin_m[i];
    end
  endtask

  // capture NQ frames after `run` rises, then stop and drain
  task automatic play(bit via_udp);
    logic [31:0] st;
    ncap = 0; capturing = 1;
    axi_read(8'h1C, st);
    if (st[31:16] > 1) n_fifo++;
    axi_write(8'h00, {30'd0, via_udp, 1'b1});
    while (ncap < NQ) @(negedge clk);
    capturing = 0;
  endtask

  function automatic real h_ideal(real t);
    if (t < 0.0) return 0.0;
    return (1.0 - sfv) * $exp(-t / tff) + sfv * $exp(-t / tfs) - $exp(-t / tr);
  endfunction

  function automatic int fl2(int a, int b);
    int t;
    t = a + b;
    return (t >= 0) ? t / 2 : -((-t + 1) / 2);
  endfunction

  // compare captured frames with the binned model and the ideal curve
  task automatic compare(string tag, bit ideal_check);
    real yr, yff, yfs, mr, mff, mfs, peak, maxrel;
    int s [N_PHASES];
    int last, bi, maxerr;
    mr = $exp(-0.8 / tr); mff = $exp(-0.8 / tff); mfs = $exp(-0.8 / tfs);
    yr = 0; yff = 0; yfs = 0; last = 0; bi = 0; maxerr = 0; peak = 0; maxrel = 0;
    for (int q = 0; q < NQ; q++) begin
      int e [N_OUT];
      for (int k = 0; k < N_PHASES; k++) begin
        real x, v;
        int m;
        m = (q - 1) * 8 + k;
        x = 0.0;
        while (bi < bin_m.size() && bin_m[bi] == m) begin x += real'(bin_a[bi]); bi++; end
        yr = mr * yr + x; yff = mff * yff + x; yfs = mfs * yfs + x;
        v = $floor((1.0 - sfv) * yff + sfv * yfs - yr);
        s[k] = (v > 32767.0) ? 32767 : (v < -32768.0) ? -32768 : int'(v);
      end
      for (int k = 0; k < N_PHASES; k++) begin
        e[2*k] = fl2(k == 0 ? last : s[k-1], s[k]);
        e[2*k+1] = s[k];
      end
      last = s[N_PHASES-1];
      for (int j = 0; j < N_OUT; j++) begin
        int d;
        d = cap[q][j] - e[j];
        if (d < 0) d = -d;
        if (d > maxerr) maxerr = d;
        checks++;
        if (d > 2) begin
          failures++;
          if (failures < 20) $display("FAIL %s frame %0d sample %0d: %0d vs %0d", tag, q, j, cap[q][j], e[j]);
        end
        if (cap[q][j] >= 32767) n_sat++;
        if (real'(cap[q][j]) > peak) peak = real'(cap[q][j]);
      end
    end
    // ideal unbinned response on the body of the pulse (above 20 % of the
    // peak and more than 8 ns after any photon, i.e. off the rising edges)
    if (ideal_check) begin
      for (int q = 0; q < NQ; q++)
        for (int j = 0; j < N_OUT; j++) begin
          real t, ideal, rel;
          bit on_edge;
          t = ((q - 1) * 8 + j / 2.0 - 0.5 * (1 - (j % 2))) * 0.8;
          ideal = 0.0;
          foreach (hit_t[i]) ideal += hit_a[i] * h_ideal(t - hit_t[i]);
          on_edge = 0;
          foreach (hit_t[i]) if (t >= hit_t[i] && t - hit_t[i] < 8.0) on_edge = 1;
          if (ideal > 0.2 * peak && !on_edge) begin
            rel = (real'(cap[q][j]) - ideal) / ideal;
            if (rel < 0) rel = -rel;
            if (rel > maxrel) maxrel = rel;
            checks++;
            if (rel > 0.02) begin
              failures++;
              if (failures < 20) $display("FAIL %s ideal t=%0.1f hw %0d ideal %0.1f", tag, t, cap[q][j], ideal);
            end
          end
        end
    end
    $display("%s: peak %0.0f LSB, max |hw - binned| %0d LSB, max relative error vs ideal %0.4f",
             tag, peak, maxerr, maxrel);
  endtask

  task automatic stop_and_drain();
    axi_write(8'h00, 32'h8);          // run off, restart the scheduler
    repeat (1500) @(negedge clk);     // tails decay inside the core
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] st, late0, stall0, nps, nudp;
    s_axil_awaddr = 0; s_axil_araddr = 0; s_axil_awvalid = 0; s_axil_wvalid = 0;
    s_axil_wdata = 0; s_axil_wstrb = 4'hF; s_axil_bready = 0; s_axil_arvalid = 0;
    s_axil_rready = 0; udp_valid = 0; udp_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- workload 1: single 20-pe event over AXI
    set_shape(1.0, 50.0, 100.0, 0.20);
    clear_workload();
    add_event(20, 10.0);
    quantize();
    send_bins(1'b0);
    play(1'b0);
    compare("single 20 pe", 1'b1);
    stop_and_drain();

    // ---- workload 2: pile-up over UDP (source switch)
    axi_write(8'h00, 32'h2);          // select UDP, run off
    n_switch++;
    clear_workload();
    add_event(20, 10.0);
    add_event(15, 80.0);
    add_event(25, 200.0);
    quantize();
    axi_read(8'h2C, stall0);
    send_bins(1'b1);
    play(1'b1);
    axi_read(8'h2C, st);
    if (st > stall0) n_stall++;       // the 200 ns event waited for the ring
    compare("pile-up 20/15/25 pe", 1'b1);
    stop_and_drain();

    // ---- workload 3: new shape, saturation, late event (AXI again)
    axi_write(8'h00, 32'h0);
    n_switch++;
    set_shape(2.0, 20.0, 300.0, 0.60);
    clear_workload();
    hit_t.push_back(20.0); hit_a.push_back(65535.0);
    hit_t.push_back(20.3); hit_a.push_back(65535.0);   // same bin: merged, clipped
    quantize();
    send_bins(1'b0);
    play(1'b0);
    compare("saturating pulse", 1'b0);
    // the stream has run dry long ago: an event right after the last one
    // belongs to a cycle already played and must be dropped
    axi_read(8'h20, late0);
    axi_write(8'h14, 32'd1);
    axi_write(8'h18, 32'd5000);
    repeat (10) @(negedge clk);
    axi_read(8'h20, st);
    if (st == late0 + 1) n_late++;
    check(st == late0 + 1, "late event dropped and counted");

    axi_read(8'h24, nps);
    axi_read(8'h28, nudp);
    check(nudp > 0 && nps > 0, "events from both sources");

    $display("mechanisms: switch %0d stall %0d late %0d merge %0d reload %0d saturation %0d fifo %0d",
             n_switch, n_stall, n_late, n_merge, n_reload, n_sat, n_fifo);
    check(n_switch > 0, "source switch");
    check(n_stall > 0,  "stall");
    check(n_late > 0,   "late drop");
    check(n_merge > 0,  "bin merge");
    check(n_reload > 1, "shape reload");
    check(n_sat > 0,    "saturation");
    check(n_fifo > 0,   "FIFO buffering");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
