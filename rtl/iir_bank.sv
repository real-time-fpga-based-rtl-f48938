// iir_bank: one exponential component (rise, fast decay or slow decay),
// replicated over the eight sub-phase lanes.
//
// Lane k carries the samples at sub-phase k of successive fabric cycles.
// Since consecutive samples of a lane are eight sub-phases apart, each lane
// is a one-pole filter with pole M^8 per cycle; its input v_k comes from
// the pre-convolution (preconv_bank), which adds the contributions of
// impulses less than eight sub-phases old.  Together the eight lanes
// produce exactly the sub-phase-rate response y[m] = M*y[m-1] + x[m], eight
// samples per cycle at an initiation interval of one.
//
// Each lane is an iir_lane in look-ahead form; latency 3 cycles.
module iir_bank
  import sipm_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  bank_coef_t             coef,
  input  state_t [N_PHASES-1:0]  v,
  output state_t [N_PHASES-1:0]  y
);

  for (genvar k = 0; k < N_PHASES; k++) begin : g_lane
    iir_lane u_lane (
      .clk   (clk),
      .rst_n (rst_n),
      .p1    (coef.p1),
      .p2    (coef.p2),
      .v     (v[k]),
      .y     (y[k])
    );
  end

endmodule
