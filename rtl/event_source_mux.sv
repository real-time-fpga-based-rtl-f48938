// event_source_mux: selects which event source feeds the event FIFO.
//
// Events arrive either from the processing system (AXI) or from an
// external host over 10GbE/UDP.  Because dt is relative to the previous
// event, interleaving two independent streams would corrupt both time
// bases, so this block forwards exactly one source at a time, chosen by
// `sel_udp`, and holds the other off (ready low).  The paper says only
// that both paths feed a common FIFO; the exclusive selection, the
// registered output stage and the per-source event counters are this
// design's choices.
//
// Interface: two valid/ready input streams, one valid/ready output stream
// with a one-entry output register (one cycle latency, full throughput).
// The selection is sampled every cycle; software switches it while the
// selected source is idle.  cnt_ps/cnt_udp count accepted events.
module event_source_mux
  import sipm_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sel_udp,
  input  logic        ps_valid,
  output logic        ps_ready,
  input  event_t      ps_data,
  input  logic        udp_valid,
  output logic        udp_ready,
  input  event_t      udp_data,
  output logic        m_valid,
  input  logic        m_ready,
  output event_t      m_data,
  output logic [31:0] cnt_ps,
  output logic [31:0] cnt_udp
);

  logic take;        // output register can accept a word this cycle
  logic in_valid;
  event_t in_data;

  assign take      = !m_valid || m_ready;
  assign ps_ready  = take && !sel_udp;
  assign udp_ready = take &&  sel_udp;
  assign in_valid  = sel_udp ? udp_valid : ps_valid;
  assign in_data   = sel_udp ? udp_data  : ps_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid <= 1'b0;
      m_data  <= '0;
      cnt_ps  <= '0;
      cnt_udp <= '0;
    end else if (take) begin
      m_valid <= in_valid;
      if (in_valid) begin
        m_data <= in_data;
        if (sel_udp) cnt_udp <= cnt_udp + 1'b1;
        else         cnt_ps  <= cnt_ps + 1'b1;
      end
    end
  end

  // a stalled output word stays put
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           m_valid && !m_ready |=> m_valid && $stable(m_data));

endmodule
