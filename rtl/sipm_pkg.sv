// sipm_pkg: types and constants shared by the SiPM emulator channel.
//
// Time is quantized into fabric cycles of 6.4 ns (156.25 MHz), each split
// into eight sub-phases of 0.8 ns.  An event on the wire is a pair
// (dt, amp): dt is the distance in sub-phases from the previous event and
// amp the summed amplitude of that sub-phase bin.  The sub-phase count,
// the 27-bit coefficient width and the 16-bit output follow the paper; the
// other word lengths (dt, amplitude, internal state, S_f) are this
// design's choice.
//
// Fixed-point formats used throughout:
//   coef_t  : unsigned fraction, COEF_W bits, value = code / 2**COEF_W
//             (a pole M = exp(-Ts/tau) lies in [0,1))
//   sf_t    : unsigned, SF_W bits with SF_FRAC fraction bits (1.0 = 2**17)
//   state_t : signed two's complement, STATE_W bits with FRAC fraction
//             bits; one integer unit equals one output LSB
package sipm_pkg;

  localparam int N_PHASES = 8;          // sub-phases per fabric cycle
  localparam int N_BANKS  = 3;          // rise, fast decay, slow decay
  localparam int N_OUT    = 2 * N_PHASES; // samples per cycle after 2x up-sampling

  localparam int DT_W     = 32;         // inter-arrival time, sub-phase units
  localparam int AMP_W    = 16;         // summed amplitude of one bin, output LSBs

  localparam int COEF_W   = 27;         // inter-phase coefficient width
  localparam int SF_W     = 18;         // slow fraction S_f width
  localparam int SF_FRAC  = 17;         // S_f fraction bits
  localparam int STATE_W  = 48;         // filter state width
  localparam int FRAC     = 16;         // filter state fraction bits
  localparam int OUT_W    = 16;         // DAC word

  typedef logic [DT_W-1:0]    dt_t;
  typedef logic [AMP_W-1:0]   amp_t;
  typedef logic [COEF_W-1:0]  coef_t;
  typedef logic [SF_W-1:0]    sf_t;
  typedef logic signed [STATE_W-1:0] state_t;
  typedef logic signed [OUT_W-1:0]   sample_t;

  // One quantized event as carried by the event FIFO.
  typedef struct packed {
    dt_t  dt;
    amp_t amp;
  } event_t;

  localparam int EVENT_W = $bits(event_t);

  // Bank order inside the shaping core.
  typedef enum logic [1:0] {
    BANK_RISE = 2'd0,
    BANK_FAST = 2'd1,
    BANK_SLOW = 2'd2
  } bank_e;

  // Coefficient set of one bank, latched by coef_gen.
  //   pow[d] = M^d for d = 1..7 (pre-convolution weights; the weight
  //            M^0 = 1 needs no multiplier and is not stored)
  //   p1     = M^8, the pole of one lane per fabric cycle
  //   p2     = M^16, its square, used by the look-ahead recursion
  typedef struct packed {
    coef_t [N_PHASES-1:1] pow;
    coef_t p1;
    coef_t p2;
  } bank_coef_t;

endpackage
