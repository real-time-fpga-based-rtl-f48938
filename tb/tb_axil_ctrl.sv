// tb_axil_ctrl: AXI4-Lite register access.  Writes and reads back the
// shape registers, checks the control pulses, the status read-back and
// the event push (two writes per event) with back-pressure on the event
// stream: a push must not complete while the previous event is waiting.
module tb_axil_ctrl;
  import sipm_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0]  s_axil_awaddr, s_axil_araddr;
  logic        s_axil_awvalid, s_axil_awready, s_axil_wvalid, s_axil_wready;
  logic [31:0] s_axil_wdata, s_axil_rdata;
  logic [3:0]  s_axil_wstrb;
  logic [1:0]  s_axil_bresp, s_axil_rresp;
  logic        s_axil_bvalid, s_axil_bready, s_axil_arvalid, s_axil_arready;
  logic        s_axil_rvalid, s_axil_rready;
  logic        ev_valid, ev_ready;
  event_t      ev_data;
  logic        run, sel_udp, cfg_load, restart;
  coef_t       m_r, m_ff, m_fs;
  sf_t         sf;
  logic        cfg_busy;
  logic [15:0] fifo_level;
  logic [31:0] late_count, cnt_ps, cnt_udp, stall_cycles;

  axil_ctrl dut (.*);

  int checks = 0, failures = 0, n_load = 0, n_restart = 0;
  event_t got [$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic axi_write(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    s_axil_awaddr = a; s_axil_wdata = d; s_axil_awvalid = 1; s_axil_wvalid = 1;
    do @(posedge clk); while (!(s_axil_awready && s_axil_wready));
    @(negedge clk);
    s_axil_awvalid = 0; s_axil_wvalid = 0;
    while (!s_axil_bvalid) @(negedge clk);
    s_axil_bready = 1;
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

  always @(posedge clk) if (rst_n) begin
    if (ev_valid && ev_ready) got.push_back(ev_data);
    if (cfg_load) n_load++;
    if (restart) n_restart++;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    s_axil_awaddr = 0; s_axil_araddr = 0; s_axil_awvalid = 0; s_axil_wvalid = 0;
    s_axil_wdata = 0; s_axil_wstrb = 4'hF; s_axil_bready = 0; s_axil_arvalid = 0;
    s_axil_rready = 0; ev_ready = 0; cfg_busy = 0; fifo_level = 16'd37;
    late_count = 32'd5; cnt_ps = 32'd11; cnt_udp = 32'd22; stall_cycles = 32'd9;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(!run && !sel_udp && m_r == 0 && sf == 0, "reset values");

    axi_write(8'h04, 32'h0396_1234);
    axi_write(8'h08, 32'h07AB_CDEF);
    axi_write(8'h0C, 32'h07F0_0001);
    axi_write(8'h10, 32'h0000_6666);
    check(m_r == 27'h396_1234 && m_ff == 27'h7AB_CDEF && m_fs == 27'h7F0_0001 && sf == 18'h6666, "shape outputs");
    axi_read(8'h04, r); check(r == 32'h0396_1234, "read M_R");
    axi_read(8'h08, r); check(r == 32'h07AB_CDEF, "read M_FF");
    axi_read(8'h0C, r); check(r == 32'h07F0_0001, "read M_FS");
    axi_read(8'h10, r); check(r == 32'h0000_6666, "read S_F");

    axi_write(8'h00, 32'h0000_0007);     // run, udp, load
    check(run && sel_udp, "ctrl bits");
    axi_write(8'h00, 32'h0000_0009);     // run, restart
    check(run && !sel_udp, "ctrl bits 2");
    check(n_load == 1 && n_restart == 1, $sformatf("pulses %0d %0d", n_load, n_restart));
    axi_read(8'h00, r); check(r == 32'h1, "read CTRL");

    cfg_busy = 1;
    axi_read(8'h1C, r); check(r == {16'd37, 15'd0, 1'b1}, "STATUS");
    axi_read(8'h20, r); check(r == 5, "LATE");
    axi_read(8'h24, r); check(r == 11, "N_PS");
    axi_read(8'h28, r); check(r == 22, "N_UDP");
    axi_read(8'h2C, r); check(r == 9, "STALL");

    // event pushes with the stream stalled: the second push must wait
    axi_write(8'h14, 32'd100);
    axi_write(8'h18, 32'd500);
    check(ev_valid && ev_data.dt == 100 && ev_data.amp == 500, "first event presented");
    axi_write(8'h14, 32'd7);
    fork
      axi_write(8'h18, 32'd900);
      begin
        repeat (20) @(negedge clk);
        check(got.size() == 0 && ev_data.amp == 500 && !s_axil_bvalid, "second push held off");
        ev_ready = 1;
      end
    join
    @(negedge clk); @(negedge clk);
    check(got.size() == 2, $sformatf("events delivered %0d", got.size()));
    if (got.size() == 2)
      check(got[0].dt == 100 && got[0].amp == 500 && got[1].dt == 7 && got[1].amp == 900, "event contents");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
