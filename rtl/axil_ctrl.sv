// axil_ctrl: AXI4-Lite slave of the processing system.
//
// Through this port the ARM processing system (running SimSiPM or any
// other event source) pushes quantized events into the programmable logic
// and sets the runtime parameters of the shaping core.  The paper states
// that events reach the logic from the processing system over AXI and
// that tau_r, tau_ff, tau_fs and S_f are programmable at runtime; the
// register map below, the two-write event push and the status registers
// are this design's choices.  Software converts each time constant tau to
// the pole code round(exp(-0.8 ns / tau) * 2**27).
//
// Register map (32-bit, byte addresses):
//   0x00 CTRL     [0] run  [1] source: 0 = AXI, 1 = UDP
//                 [2] load shape (write 1: pulse, reads 0)
//                 [3] restart scheduler (write 1: pulse, reads 0)
//   0x04 M_R      [26:0] rise pole code
//   0x08 M_FF     [26:0] fast-decay pole code
//   0x0C M_FS     [26:0] slow-decay pole code
//   0x10 S_F      [17:0] slow fraction, 1.0 = 0x20000
//   0x14 EVT_DT   [31:0] dt of the next event, in 0.8 ns sub-phases
//   0x18 EVT_AMP  [15:0] amplitude; the write pushes (EVT_DT, amp)
//   0x1C STATUS   [0] shape load busy  [31:16] event FIFO level
//   0x20 LATE     events dropped because their cycle had passed
//   0x24 N_PS     events accepted from AXI
//   0x28 N_UDP    events accepted from UDP
//   0x2C STALL    cycles an event waited for room in the scheduler
//
// Handshake: a write is taken when AWVALID and WVALID are both high and no
// response is outstanding; a write to EVT_AMP also waits until the
// previous pushed event has left the one-entry event register, so the PS
// is back-pressured through the AXI write channel.  Reads return in the
// cycle after ARVALID.  Responses are always OKAY; WSTRB is ignored (full
// words only).  Reset: all registers zero (run off, source AXI).
module axil_ctrl
  import sipm_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
  input  logic [7:0]  s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic [3:0]  s_axil_wstrb,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  input  logic [7:0]  s_axil_araddr,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  // event stream from the PS
  output logic        ev_valid,
  input  logic        ev_ready,
  output event_t      ev_data,
  // control and shape parameters
  output logic        run,
  output logic        sel_udp,
  output logic        cfg_load,
  output logic        restart,
  output coef_t       m_r,
  output coef_t       m_ff,
  output coef_t       m_fs,
  output sf_t         sf,
  // status
  input  logic        cfg_busy,
  input  logic [15:0] fifo_level,
  input  logic [31:0] late_count,
  input  logic [31:0] cnt_ps,
  input  logic [31:0] cnt_udp,
  input  logic [31:0] stall_cycles
);

  typedef enum logic [7:0] {
    A_CTRL   = 8'h00,
    A_M_R    = 8'h04,
    A_M_FF   = 8'h08,
    A_M_FS   = 8'h0C,
    A_S_F    = 8'h10,
    A_EVT_DT = 8'h14,
    A_EVT_AMP= 8'h18,
    A_STATUS = 8'h1C,
    A_LATE   = 8'h20,
    A_N_PS   = 8'h24,
    A_N_UDP  = 8'h28,
    A_STALL  = 8'h2C
  } reg_addr_e;

  dt_t  evt_dt;
  logic wr_go;
  logic [7:0] waddr, raddr;

  assign waddr = {s_axil_awaddr[7:2], 2'b00};
  assign raddr = {s_axil_araddr[7:2], 2'b00};
  assign wr_go = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid &&
                 !(waddr == A_EVT_AMP && ev_valid);
  assign s_axil_awready = wr_go;
  assign s_axil_wready  = wr_go;
  assign s_axil_bresp   = 2'b00;
  assign s_axil_rresp   = 2'b00;
  assign s_axil_arready = !s_axil_rvalid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axil_bvalid <= 1'b0;
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
      ev_valid      <= 1'b0;
      ev_data       <= '0;
      evt_dt        <= '0;
      run           <= 1'b0;
      sel_udp       <= 1'b0;
      cfg_load      <= 1'b0;
      restart       <= 1'b0;
      m_r           <= '0;
      m_ff          <= '0;
      m_fs          <= '0;
      sf            <= '0;
    end else begin
      cfg_load <= 1'b0;
      restart  <= 1'b0;
      if (ev_valid && ev_ready) ev_valid <= 1'b0;

      // write channel
      if (s_axil_bvalid && s_axil_bready) s_axil_bvalid <= 1'b0;
      if (wr_go) begin
        s_axil_bvalid <= 1'b1;
        case (waddr)
          A_CTRL: begin
            run      <= s_axil_wdata[0];
            sel_udp  <= s_axil_wdata[1];
            cfg_load <= s_axil_wdata[2];
            restart  <= s_axil_wdata[3];
          end
          A_M_R:     m_r    <= s_axil_wdata[COEF_W-1:0];
          A_M_FF:    m_ff   <= s_axil_wdata[COEF_W-1:0];
          A_M_FS:    m_fs   <= s_axil_wdata[COEF_W-1:0];
          A_S_F:     sf     <= s_axil_wdata[SF_W-1:0];
          A_EVT_DT:  evt_dt <= s_axil_wdata[DT_W-1:0];
          A_EVT_AMP: begin
            ev_valid <= 1'b1;
            ev_data  <= '{dt: evt_dt, amp: s_axil_wdata[AMP_W-1:0]};
          end
          default: ;
        endcase
      end

      // read channel
      if (s_axil_rvalid && s_axil_rready) s_axil_rvalid <= 1'b0;
      if (s_axil_arvalid && s_axil_arready) begin
        s_axil_rvalid <= 1'b1;
        case (raddr)
          A_CTRL:    s_axil_rdata <= {30'd0, sel_udp, run};
          A_M_R:     s_axil_rdata <= 32'(m_r);
          A_M_FF:    s_axil_rdata <= 32'(m_ff);
          A_M_FS:    s_axil_rdata <= 32'(m_fs);
          A_S_F:     s_axil_rdata <= 32'(sf);
          A_EVT_DT:  s_axil_rdata <= 32'(evt_dt);
          A_STATUS:  s_axil_rdata <= {fifo_level, 15'd0, cfg_busy};
          A_LATE:    s_axil_rdata <= late_count;
          A_N_PS:    s_axil_rdata <= cnt_ps;
          A_N_UDP:   s_axil_rdata <= cnt_udp;
          A_STALL:   s_axil_rdata <= stall_cycles;
          default:   s_axil_rdata <= 32'hDEAD_BEEF;
        endcase
      end
    end
  end

  // AXI4-Lite: a response, once raised, holds until accepted
  a_bhold: assert property (@(posedge clk) disable iff (!rst_n)
                            s_axil_bvalid && !s_axil_bready |=> s_axil_bvalid);
  a_rhold: assert property (@(posedge clk) disable iff (!rst_n)
                            s_axil_rvalid && !s_axil_rready |=> s_axil_rvalid && $stable(s_axil_rdata));

endmodule
