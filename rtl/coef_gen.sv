// coef_gen: coefficient set of one shaping bank, computed from its pole.
//
// The software supplies the pole M = exp(-Ts/tau) of one exponential
// component for the sub-phase period Ts = 0.8 ns, as a COEF_W-bit unsigned
// fraction.  The bank needs the pre-convolution weights M^1..M^7, the
// per-cycle lane pole M^8 and, for the look-ahead recursion, its square
// M^16.  Following the paper, these powers are precomputed and latched so
// that no two multiplications are chained in one fabric cycle: on a
// `load` pulse the block runs a sequential power chain, one truncated
// multiply per cycle (pow[d] = floor(pow[d-1] * M / 2**COEF_W)), into a
// working set, and copies the finished set into the output registers in a
// single cycle.  Until then the datapath keeps reading the previous set
// ("read before write"), so a reload never exposes a half-written table.
//
// Interface: `m` is sampled on the cycle `load` is high; `busy` is high
// while the chain runs (16 cycles); `coef` changes only on the cycle busy
// falls (the set is published on the cycle the last power is
// produced).  Reset clears the set to zero, which silences the bank until the
// first load.  The sequential chain and the reset value are this design's
// choices; the paper states only that the coefficients are pre-loaded.
module coef_gen
  import sipm_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       load,
  input  coef_t      m,
  output logic       busy,
  output bank_coef_t coef
);

  localparam int LAST_POW = 2 * N_PHASES;   // M^16

  coef_t                     m_q;
  coef_t [LAST_POW:1]        work;
  logic  [$clog2(LAST_POW+1)-1:0] step;    // power being produced next

  logic [2*COEF_W-1:0] prod;
  assign prod = work[step-1'b1] * m_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      step <= '0;
      m_q  <= '0;
      work <= '0;
      coef <= '0;
    end else if (load) begin
      busy    <= 1'b1;
      m_q     <= m;
      work[1] <= m;
      step    <= 2;
    end else if (busy) begin
      work[step] <= prod[2*COEF_W-1 -: COEF_W];
      if (step == LAST_POW[$bits(step)-1:0]) begin
        // last power produced: publish the whole set in this same cycle
        busy        <= 1'b0;
        step        <= '0;
        for (int d = 1; d < N_PHASES; d++) coef.pow[d] <= work[d];
        coef.p1     <= work[N_PHASES];
        coef.p2     <= prod[2*COEF_W-1 -: COEF_W];
      end else begin
        step <= step + 1'b1;
      end
    end
  end

endmodule
