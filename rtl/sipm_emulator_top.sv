// sipm_emulator_top: one real-time SiPM emulator channel.
//
// Quantized events (dt, amp) enter from the processing system through the
// AXI4-Lite port or from an external host through the 10GbE/UDP receiver
// (outside this module, connected as a valid/ready event stream).  The
// selected source fills the common event FIFO; the sub-phase scheduler
// places each event on a fabric cycle and one of eight 0.8 ns sub-phases
// and hands a frame of eight triggers and amplitudes per cycle to the
// three-exponential shaping core, which returns sixteen 16-bit samples per
// 6.4 ns cycle (2.5 GS/s) for the DAC interface.
//
//   AXI4-Lite --> axil_ctrl --ev--+
//                                 +--> event_source_mux --> event_fifo
//   udp_* ------------------------+          --> subphase_scheduler
//                                            --> shaping_core --> dac
//
// The chain follows the paper's data path (Fig. 4); the FIFO depth and the
// scheduler ring depth are this design's choices.  The DAC serializer and
// the 10GbE/UDP stack are not part of this module: `dac`/`dac_valid` and
// `udp_*` are their connection points.  Clock: the 156.25 MHz fabric
// clock for everything; reset is active low, asynchronous.
module sipm_emulator_top
  import sipm_pkg::*;
#(
  parameter int FIFO_DEPTH  = 512,
  parameter int SCHED_SLOTS = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // AXI4-Lite from the processing system
  input  logic [7:0]            s_axil_awaddr,
  input  logic                  s_axil_awvalid,
  output logic                  s_axil_awready,
  input  logic [31:0]           s_axil_wdata,
  input  logic [3:0]            s_axil_wstrb,
  input  logic                  s_axil_wvalid,
  output logic                  s_axil_wready,
  output logic [1:0]            s_axil_bresp,
  output logic                  s_axil_bvalid,
  input  logic                  s_axil_bready,
  input  logic [7:0]            s_axil_araddr,
  input  logic                  s_axil_arvalid,
  output logic                  s_axil_arready,
  output logic [31:0]           s_axil_rdata,
  output logic [1:0]            s_axil_rresp,
  output logic                  s_axil_rvalid,
  input  logic                  s_axil_rready,
  // event stream from the 10GbE/UDP receiver
  input  logic                  udp_valid,
  output logic                  udp_ready,
  input  event_t                udp_data,
  // samples for the DAC interface, dac[0] earliest
  output logic                  dac_valid,
  output sample_t [N_OUT-1:0]   dac
);

  logic   ps_valid, ps_ready;
  event_t ps_data;
  logic   mux_valid, mux_ready;
  event_t mux_data;
  logic   fifo_valid, fifo_ready;
  event_t fifo_data;
  logic [$clog2(FIFO_DEPTH):0] fifo_level;
  logic   run, sel_udp, cfg_load, restart, cfg_busy;
  coef_t  m_r, m_ff, m_fs;
  sf_t    sf;
  logic [31:0] late_count, cnt_ps, cnt_udp, stall_cycles;
  logic                sched_valid;
  logic [N_PHASES-1:0] sched_trig;
  amp_t [N_PHASES-1:0] sched_amp;

  axil_ctrl u_ctrl (
    .clk, .rst_n,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready,
    .s_axil_wdata, .s_axil_wstrb, .s_axil_wvalid, .s_axil_wready,
    .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .s_axil_araddr, .s_axil_arvalid, .s_axil_arready,
    .s_axil_rdata, .s_axil_rresp, .s_axil_rvalid, .s_axil_rready,
    .ev_valid     (ps_valid),
    .ev_ready     (ps_ready),
    .ev_data      (ps_data),
    .run, .sel_udp, .cfg_load, .restart,
    .m_r, .m_ff, .m_fs, .sf,
    .cfg_busy,
    .fifo_level   (16'(fifo_level)),
    .late_count, .cnt_ps, .cnt_udp, .stall_cycles
  );

  event_source_mux u_mux (
    .clk, .rst_n,
    .sel_udp,
    .ps_valid, .ps_ready, .ps_data,
    .udp_valid, .udp_ready, .udp_data,
    .m_valid (mux_valid),
    .m_ready (mux_ready),
    .m_data  (mux_data),
    .cnt_ps, .cnt_udp
  );

  event_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .s_valid (mux_valid),
    .s_ready (mux_ready),
    .s_data  (mux_data),
    .m_valid (fifo_valid),
    .m_ready (fifo_ready),
    .m_data  (fifo_data),
    .level   (fifo_level)
  );

  subphase_scheduler #(.SLOTS(SCHED_SLOTS)) u_sched (
    .clk, .rst_n,
    .run, .restart,
    .s_valid      (fifo_valid),
    .s_ready      (fifo_ready),
    .s_data       (fifo_data),
    .out_valid    (sched_valid),
    .out_trig     (sched_trig),
    .out_amp      (sched_amp),
    .late_count, .stall_cycles
  );

  shaping_core u_core (
    .clk, .rst_n,
    .in_valid  (sched_valid),
    .trig      (sched_trig),
    .amp       (sched_amp),
    .cfg_load, .m_r, .m_ff, .m_fs, .sf,
    .cfg_busy,
    .dac_valid, .dac
  );

endmodule
