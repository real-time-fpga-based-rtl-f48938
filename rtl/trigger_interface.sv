// trigger_interface: entry register of the shaping core.
//
// Every fabric cycle the core accepts eight sub-phase triggers and eight
// amplitudes (initiation interval one).  This stage registers them, turns
// each (trigger, amplitude) pair into an impulse value x_k (the amplitude
// where the trigger bit is set and the frame is valid, zero otherwise) and
// keeps the previous cycle's impulses, which the pre-convolution needs for
// lanes that receive the tail of an impulse injected late in the cycle
// before.  Eight triggers plus eight amplitudes per cycle follow the paper
// (Fig. 5); masking amplitudes by the trigger bit and holding one cycle of
// history here are this design's choices.
//
// Timing: one register stage; x_cur/x_prev/out_valid are valid one cycle
// after the inputs are sampled.  Reset clears both frames.
module trigger_interface
  import sipm_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic [N_PHASES-1:0]         trig,
  input  amp_t [N_PHASES-1:0]         amp,
  output logic                        out_valid,
  output amp_t [N_PHASES-1:0]         x_cur,
  output amp_t [N_PHASES-1:0]         x_prev
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      x_cur     <= '0;
      x_prev    <= '0;
    end else begin
      out_valid <= in_valid;
      x_prev    <= x_cur;
      for (int k = 0; k < N_PHASES; k++)
        x_cur[k] <= (in_valid && trig[k]) ? amp[k] : '0;
    end
  end

endmodule
