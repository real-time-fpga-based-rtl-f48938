// subphase_scheduler: turns the (dt, amp) event stream into per-cycle
// trigger frames for the shaping core.
//
// Each event carries its distance dt from the previous event in 0.8 ns
// sub-phases.  The scheduler accumulates these into an absolute time t
// (in sub-phases) and splits it into a fabric cycle c = t/8 + 1 and a
// sub-phase t mod 8.  Events are written into a ring of SLOTS frames, one
// frame per future cycle, each holding eight amplitudes and eight trigger
// bits; two events in the same bin add (saturating).  Every running cycle
// the frame of the current cycle is read out to the shaping core and the
// slot cleared, so all events of a cycle reach the core together, even
// though the FIFO delivers at most one event per cycle.
//
// Flow control:
//   * stall:  an event more than SLOTS-1 cycles ahead of the playback
//             cycle waits (FIFO not popped) until the ring reaches it;
//   * late:   an event whose cycle has already been played (the FIFO ran
//             dry for longer than the preload) is dropped and counted.
// While `run` is low nothing is played and the ring preloads the first
// SLOTS-1 cycles.  Time zero (t = 0) is the second cycle after `run`
// rises.  Deasserting `run` freezes playback; `restart` clears the ring,
// the clock and the time base.
//
// The paper states the function (group the events of a cycle, map dt onto
// a cycle and a sub-phase); the ring buffer, its depth, the preload and
// the late/stall policy are this design's.
//
// Timing: frame outputs are registered; out_valid is high for every played
// cycle.  One event is accepted per cycle at most.
module subphase_scheduler
  import sipm_pkg::*;
#(
  parameter int SLOTS = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      run,
  input  logic                      restart,
  input  logic                      s_valid,
  output logic                      s_ready,
  input  event_t                    s_data,
  output logic                      out_valid,
  output logic [N_PHASES-1:0]       out_trig,
  output amp_t [N_PHASES-1:0]       out_amp,
  output logic [31:0]               late_count,
  output logic [31:0]               stall_cycles
);

  localparam int SW    = $clog2(SLOTS);
  localparam int TW    = 48;           // absolute time, sub-phases
  localparam int CW    = TW - 3 + 1;   // signed cycle numbers

  logic [TW-1:0]          t_abs;       // time of the last accepted event
  logic signed [CW-1:0]   now;         // cycle played next
  logic                   pend;        // an accepted event awaits a slot
  logic signed [CW-1:0]   pend_cycle;
  logic [2:0]             pend_phase;
  amp_t                   pend_amp;

  amp_t [N_PHASES-1:0]    ring_amp  [SLOTS];
  logic [N_PHASES-1:0]    ring_trig [SLOTS];

  logic signed [CW-1:0]   ahead;       // pend_cycle - now
  logic                   fits, late, place;
  logic [SW-1:0]          wslot, rslot;
  logic                   play;
  logic [TW-1:0]          t_next;
  amp_t                   old_amp;
  logic [AMP_W:0]         sum_amp;

  assign play   = run && !restart;
  assign ahead  = pend_cycle - now;
  // while playing, slot `now` is read this cycle, so the write must target
  // a later cycle; while paused, slot `now` is still free to fill
  assign late   = pend && (play ? (ahead <= 0) : (ahead < 0));
  assign fits   = pend && !late && (ahead < CW'(SLOTS));
  assign place  = fits;
  assign wslot  = pend_cycle[SW-1:0];
  assign rslot  = now[SW-1:0];
  assign s_ready = !restart && (!pend || place || late);
  assign t_next = t_abs + TW'(s_data.dt);
  assign old_amp = ring_amp[wslot][pend_phase];
  assign sum_amp = {1'b0, old_amp} + {1'b0, pend_amp};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_abs        <= '0;
      now          <= '0;
      pend         <= 1'b0;
      pend_cycle   <= '0;
      pend_phase   <= '0;
      pend_amp     <= '0;
      out_valid    <= 1'b0;
      out_trig     <= '0;
      out_amp      <= '0;
      late_count   <= '0;
      stall_cycles <= '0;
      for (int i = 0; i < SLOTS; i++) begin
        ring_amp[i]  <= '0;
        ring_trig[i] <= '0;
      end
    end else if (restart) begin
      t_abs     <= '0;
      now       <= '0;
      pend      <= 1'b0;
      out_valid <= 1'b0;
      out_trig  <= '0;
      out_amp   <= '0;
      for (int i = 0; i < SLOTS; i++) begin
        ring_amp[i]  <= '0;
        ring_trig[i] <= '0;
      end
    end else begin
      // playback: read and clear the frame of cycle `now`
      out_valid <= play;
      if (play) begin
        out_trig           <= ring_trig[rslot];
        out_amp            <= ring_amp[rslot];
        ring_trig[rslot]   <= '0;
        ring_amp[rslot]    <= '0;
        now                <= now + 1'b1;
      end else begin
        out_trig <= '0;
        out_amp  <= '0;
      end

      // placement of the pending event (never the slot being read)
      if (place) begin
        ring_trig[wslot][pend_phase] <= 1'b1;
        ring_amp[wslot][pend_phase]  <= sum_amp[AMP_W] ? '1 : sum_amp[AMP_W-1:0];
      end
      if (late) late_count <= late_count + 1'b1;
      if (pend && !late && !fits) stall_cycles <= stall_cycles + 1'b1;

      // accept the next event
      if (s_valid && s_ready) begin
        pend       <= 1'b1;
        t_abs      <= t_next;
        pend_cycle <= CW'(t_next >> 3) + 1'b1;
        pend_phase <= t_next[2:0];
        pend_amp   <= s_data.amp;
      end else if (place || late) begin
        pend <= 1'b0;
      end
    end
  end

  a_no_collision: assert property (@(posedge clk) disable iff (!rst_n || restart)
                                   place && play |-> wslot != rslot);

endmodule
