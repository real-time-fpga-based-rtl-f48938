// preconv_bank: sub-phase pre-convolution for one exponential bank.
//
// An impulse of amplitude A at sub-phase j of cycle n contributes
// A*M^(m-j) to every later sub-phase m.  Each bank keeps eight lanes, lane
// k holding the samples at sub-phase k of successive cycles, and each lane
// runs its own one-pole recursion with the per-cycle pole M^8 (iir_bank).
// What the lane recursion cannot see is the part of an impulse that falls
// inside the last eight sub-phases; this block injects it:
//
//   v_k[n] = sum_{d=0..7} M^d * x_{k-d}[n]           for k-d >= 0
//                       + M^d * x_{k-d+8}[n-1]       for k-d <  0
//
// i.e. a length-eight FIR with the pre-loaded weights 1, M, ..., M^7 per
// lane, wrapping into the previous cycle's impulses.  This follows the
// paper's pre-convolution; splitting it into lanes with an explicit
// wrap-around is how this design reads "propagates to the later
// sub-phases of the same cycle and into the following cycle".
//
// Arithmetic: x is an unsigned integer, M^d a COEF_W-bit fraction; each
// product is truncated to FRAC fraction bits.  The weight 1 needs no
// multiplier.  Pipeline: one product register (the DSP MREG) and a
// three-level registered adder tree, 4 cycles from x to v.
module preconv_bank
  import sipm_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  bank_coef_t             coef,
  input  amp_t   [N_PHASES-1:0]  x_cur,
  input  amp_t   [N_PHASES-1:0]  x_prev,
  output state_t [N_PHASES-1:0]  v
);

  localparam int PROD_W = AMP_W + COEF_W;
  localparam int SHIFT  = COEF_W - FRAC;

  state_t [N_PHASES-1:0][N_PHASES-1:0] term;     // [lane][distance]
  state_t [N_PHASES-1:0][3:0]          lvl1;
  state_t [N_PHASES-1:0][1:0]          lvl2;

  function automatic amp_t src(input int k, input int d,
                               input amp_t [N_PHASES-1:0] cur,
                               input amp_t [N_PHASES-1:0] prev);
    if (k - d >= 0) return cur[k-d];
    else            return prev[k-d+N_PHASES];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      term <= '0;
      lvl1 <= '0;
      lvl2 <= '0;
      v    <= '0;
    end else begin
      for (int k = 0; k < N_PHASES; k++) begin
        // stage 1: weighted injection
        term[k][0] <= state_t'({src(k, 0, x_cur, x_prev), FRAC'(0)});
        for (int d = 1; d < N_PHASES; d++) begin
          logic [PROD_W-1:0] p;
          p = src(k, d, x_cur, x_prev) * coef.pow[d];
          term[k][d] <= state_t'(p[PROD_W-1:SHIFT]);
        end
        // stages 2-4: adder tree
        for (int i = 0; i < 4; i++) lvl1[k][i] <= term[k][2*i] + term[k][2*i+1];
        for (int i = 0; i < 2; i++) lvl2[k][i] <= lvl1[k][2*i] + lvl1[k][2*i+1];
        v[k] <= lvl2[k][0] + lvl2[k][1];
      end
    end
  end

endmodule
