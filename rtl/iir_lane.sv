// iir_lane: one-pole recursive filter in look-ahead form.
//
// The plain recursion y[n] = P*y[n-1] + v[n] would have to multiply, add
// and feed back within one cycle.  Rewritten with one step of look-ahead,
//
//   y[n] = P^2 * y[n-2] + P * v[n-1] + v[n],
//
// it has the same pole and impulse response but a feedback distance of
// two, so the product inside the loop gets its own register (the DSP48E2
// MREG).  P = M^8 and P^2 = M^16 come precomputed from coef_gen, so no
// multiplications are chained.  The look-ahead form is the paper's; the
// register placement below is this design's.
//
// Pipeline: v_d <= v;  mw <= P*v_d;  w <= v_d + mw   (w = v[n] + P*v[n-1])
//           loop:  m2 <= P^2*y;  y <= m2 + w
// y follows v by 3 cycles.  Products are truncated (arithmetic shift) to
// the FRAC-bit state format.
module iir_lane
  import sipm_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  coef_t  p1,
  input  coef_t  p2,
  input  state_t v,
  output state_t y
);

  localparam int PW = STATE_W + COEF_W + 1;

  state_t v_d, mw, w, m2;
  logic signed [PW-1:0] prod_w, prod_2;

  assign prod_w = v_d * $signed({1'b0, p1});
  assign prod_2 = y   * $signed({1'b0, p2});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_d <= '0;
      mw  <= '0;
      w   <= '0;
      m2  <= '0;
      y   <= '0;
    end else begin
      v_d <= v;
      mw  <= state_t'(prod_w >>> COEF_W);
      w   <= v_d + mw;
      m2  <= state_t'(prod_2 >>> COEF_W);
      y   <= m2 + w;
    end
  end

endmodule
