// sat_interp: output stage, 8 filter samples -> 16 DAC samples per cycle.
//
// Stage 1 drops the FRAC fraction bits of each combined sample (truncation
// towards minus infinity) and saturates it to a signed OUT_W-bit word.
// Stage 2 up-samples by two with linear interpolation: between two
// consecutive 0.8 ns samples it inserts their mean, giving 16 samples at
// 0.4 ns spacing (2.5 GS/s at 156.25 MHz).  The inserted sample precedes
// its partner, so with s[-1] the last sample of the previous cycle:
//
//   dac[2k]   = floor((s[k-1] + s[k]) / 2)
//   dac[2k+1] = s[k]                          k = 0..7, dac[0] earliest
//
// Saturation, 16-bit quantization and 2x linear interpolation follow the
// paper; the rounding, the signed output code and the sample order are
// this design's choices.  Latency 2 cycles.
module sat_interp
  import sipm_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  state_t [N_PHASES-1:0]  y,
  output sample_t [N_OUT-1:0]    dac
);

  localparam int IW = STATE_W - FRAC;
  localparam logic signed [IW-1:0] MAXV = IW'(2**(OUT_W-1) - 1);
  localparam logic signed [IW-1:0] MINV = -IW'(2**(OUT_W-1));

  sample_t [N_PHASES-1:0] s;
  sample_t                s_last;

  function automatic sample_t saturate(input state_t x);
    logic signed [IW-1:0] i;
    i = x[STATE_W-1:FRAC];
    if (i > MAXV)      return sample_t'(MAXV);
    else if (i < MINV) return sample_t'(MINV);
    else               return sample_t'(i);
  endfunction

  function automatic sample_t mid(input sample_t a, input sample_t b);
    logic signed [OUT_W:0] t;
    t = {a[OUT_W-1], a} + {b[OUT_W-1], b};
    return sample_t'(t >>> 1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s      <= '0;
      s_last <= '0;
      dac    <= '0;
    end else begin
      for (int k = 0; k < N_PHASES; k++) s[k] <= saturate(y[k]);
      s_last <= s[N_PHASES-1];
      dac[0] <= mid(s_last, s[0]);
      dac[1] <= s[0];
      for (int k = 1; k < N_PHASES; k++) begin
        dac[2*k]   <= mid(s[k-1], s[k]);
        dac[2*k+1] <= s[k];
      end
    end
  end

endmodule
