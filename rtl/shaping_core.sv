// shaping_core: three-exponential SiPM shaping engine.
//
// Each fabric cycle it takes eight sub-phase triggers with their
// amplitudes and returns sixteen 16-bit DAC samples, the sampled response
//   A * [ (1-S_f) e^(-t/tau_ff) + S_f e^(-t/tau_fs) - e^(-t/tau_r) ]
// of every impulse, superposed.  Dataflow (paper Fig. 5):
//
//   trigger_interface -> 3 x (preconv_bank -> iir_bank)  [rise, fast, slow]
//                     -> weighted_combiner -> sat_interp -> dac[15:0]
//
// The three banks run in parallel, not in cascade, because the response
// is a sum of exponentials.  Each bank has its own coef_gen, which turns
// the programmed pole M = exp(-0.8 ns / tau) into the latched powers the
// bank uses.  The four runtime parameters are the three poles and S_f;
// software converts time constants to poles.
//
// Timing: initiation interval one (a new set of eight triggers every
// cycle) and 13 register stages from the trigger inputs to `dac`:
//   1 trigger_interface, 4 preconv_bank, 3 iir_bank, 3 weighted_combiner,
//   2 sat_interp.
// The 13-cycle latency and II = 1 are the paper's figures; the split of
// the stages is this design's.  `dac_valid` is `in_valid` delayed by the
// same 13 cycles.  A coefficient load takes 16 cycles (cfg_busy) and
// switches a bank's coefficients in a single cycle.
module shaping_core
  import sipm_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  // trigger interface
  input  logic                        in_valid,
  input  logic   [N_PHASES-1:0]       trig,
  input  amp_t   [N_PHASES-1:0]       amp,
  // shape parameters
  input  logic                        cfg_load,
  input  coef_t                       m_r,
  input  coef_t                       m_ff,
  input  coef_t                       m_fs,
  input  sf_t                         sf,
  output logic                        cfg_busy,
  // output samples, dac[0] earliest
  output logic                        dac_valid,
  output sample_t [N_OUT-1:0]         dac
);

  localparam int LATENCY = 13;

  amp_t   [N_PHASES-1:0] x_cur, x_prev;
  logic                  ti_valid;
  coef_t  [N_BANKS-1:0]  m_bank;
  bank_coef_t [N_BANKS-1:0] coef;
  logic   [N_BANKS-1:0]  busy;
  state_t [N_BANKS-1:0][N_PHASES-1:0] v, y;
  state_t [N_PHASES-1:0] y_comb;
  logic   [LATENCY-2:0]  valid_sr;

  assign m_bank[BANK_RISE] = m_r;
  assign m_bank[BANK_FAST] = m_ff;
  assign m_bank[BANK_SLOW] = m_fs;
  assign cfg_busy = |busy;

  trigger_interface u_trig (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (in_valid),
    .trig      (trig),
    .amp       (amp),
    .out_valid (ti_valid),
    .x_cur     (x_cur),
    .x_prev    (x_prev)
  );

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    coef_gen u_coef (
      .clk   (clk),
      .rst_n (rst_n),
      .load  (cfg_load),
      .m     (m_bank[b]),
      .busy  (busy[b]),
      .coef  (coef[b])
    );
    preconv_bank u_pre (
      .clk    (clk),
      .rst_n  (rst_n),
      .coef   (coef[b]),
      .x_cur  (x_cur),
      .x_prev (x_prev),
      .v      (v[b])
    );
    iir_bank u_iir (
      .clk   (clk),
      .rst_n (rst_n),
      .coef  (coef[b]),
      .v     (v[b]),
      .y     (y[b])
    );
  end

  weighted_combiner u_comb (
    .clk   (clk),
    .rst_n (rst_n),
    .sf    (sf),
    .y_r   (y[BANK_RISE]),
    .y_ff  (y[BANK_FAST]),
    .y_fs  (y[BANK_SLOW]),
    .y_out (y_comb)
  );

  sat_interp u_out (
    .clk   (clk),
    .rst_n (rst_n),
    .y     (y_comb),
    .dac   (dac)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid_sr <= '0;
    else        valid_sr <= {valid_sr[LATENCY-3:0], ti_valid};
  end
  assign dac_valid = valid_sr[LATENCY-2];

endmodule
