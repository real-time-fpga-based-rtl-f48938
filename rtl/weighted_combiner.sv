// weighted_combiner: sums the three exponential banks into the SiPM shape.
//
// For each of the eight lanes it forms
//
//   y = (1 - S_f) * y_ff + S_f * y_fs - y_r
//
// which is the paper's superposition H(t) = (1-S_f) e^(-t/tau_ff)
// + S_f e^(-t/tau_fs) - e^(-t/tau_r) applied to the impulse train.  S_f is
// an unsigned value with SF_FRAC fraction bits (1.0 = 2**17); a value
// above 1.0 is clamped to 1.0.  1 - S_f is derived here from the S_f
// register.  The weight format and clamping are this design's choices.
//
// Pipeline (3 cycles): weight products (MREG) -> sum of the two decays,
// truncated to FRAC bits -> subtract the rise term.
module weighted_combiner
  import sipm_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  sf_t                    sf,
  input  state_t [N_PHASES-1:0]  y_r,
  input  state_t [N_PHASES-1:0]  y_ff,
  input  state_t [N_PHASES-1:0]  y_fs,
  output state_t [N_PHASES-1:0]  y_out
);

  localparam int PW = STATE_W + SF_W + 1;
  localparam sf_t ONE = sf_t'(1) << SF_FRAC;

  sf_t w_fs, w_ff;
  assign w_fs = (sf > ONE) ? ONE : sf;
  assign w_ff = ONE - w_fs;

  logic signed [N_PHASES-1:0][PW-1:0] p_ff, p_fs;
  state_t [N_PHASES-1:0] r_d1, r_d2, dsum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_ff  <= '0;
      p_fs  <= '0;
      r_d1  <= '0;
      r_d2  <= '0;
      dsum  <= '0;
      y_out <= '0;
    end else begin
      for (int k = 0; k < N_PHASES; k++) begin
        p_ff[k] <= y_ff[k] * $signed({1'b0, w_ff});
        p_fs[k] <= y_fs[k] * $signed({1'b0, w_fs});
        r_d1[k] <= y_r[k];
        dsum[k] <= state_t'((p_ff[k] + p_fs[k]) >>> SF_FRAC);
        r_d2[k] <= r_d1[k];
        y_out[k] <= dsum[k] - r_d2[k];
      end
    end
  end

endmodule
