# Real-time SiPM signal emulation with a temporally quantized three-exponential shaper

A silicon photomultiplier (SiPM) answers each detected photon with a current
pulse that has a sub-nanosecond rise and two exponential decays. Software
such as SimSiPM can list every photon hit of an event, including dark
counts, crosstalk and afterpulses, with an arbitrary time stamp. This RTL
turns such a list into the analog waveform in real time. It does not replay
stored waveforms. The host sends only compact `(dt, amplitude)` events. The
FPGA builds the waveform from them with recursive filters and delivers
sixteen 16-bit samples per 6.4 ns fabric cycle, which is 2.5 GS/s for a
high-speed DAC.

The architecture follows the one described in "Real-Time FPGA-Based SiPM
Detector Emulation Using a Temporally Quantized Model" (S. Carsi et al.). The
RTL here is an independent implementation of it, and the section "Where this
RTL departs from, or goes beyond, the source design" lists what was added or
chosen here.

Three ideas carry the design:

1. **Superposition.** The single-photon response is written as a sum of three
   exponentials,
   `H(t) = (1 - S_f)·e^(-t/τ_ff) + S_f·e^(-t/τ_fs) - e^(-t/τ_r)`.
   Each term is one first-order IIR filter. The three filters run side by
   side, and a weighted sum gives the pulse. This sum matches the more usual
   product form `(1 - e^(-t/τ_r))·[...]` whenever `τ_r ≪ τ_ff`.
2. **Temporal quantization.** The fabric runs at 156.25 MHz (6.4 ns). Each
   cycle is split into eight *sub-phases* of 0.8 ns. Upstream software bins
   the photon hits into sub-phases and sums the hits that share a bin. It
   sends one event per non-empty bin. This gives 0.8 ns trigger resolution
   from a slow clock, and pile-up costs nothing because coincident hits just
   add.
3. **Eight lanes per filter, with a look-ahead recursion.** A filter that
   produces eight sub-phase samples per cycle is built as eight lanes. Lane
   `k` holds sub-phase `k` of successive cycles. A pre-convolution injects
   each impulse into the lanes that follow it within the next eight
   sub-phases. Each lane's recursion is rewritten so that its feedback
   spans two cycles, which leaves room for a pipeline register inside the
   loop.

## Data path

```
 processing system --AXI4-Lite--> axil_ctrl --+
                                              +--> event_source_mux --> event_fifo
 10GbE/UDP receiver --udp_* stream------------+            |
                                                           v
                                               subphase_scheduler
                                  8 triggers + 8 amplitudes per cycle
                                                           v
   shaping_core:  trigger_interface
                  -> preconv_bank  x3  (rise, fast decay, slow decay)
                  -> iir_bank      x3  (8 look-ahead lanes each)
                  -> weighted_combiner
                  -> sat_interp    (saturate, 16 bit, 2x interpolation)
                                                           v
                                     dac[15:0], 16 samples per cycle
```

Everything runs on the 156.25 MHz fabric clock and uses an asynchronous,
active-low reset. `sipm_emulator_top` is one emulator channel. Outside it
are the 10GbE MAC/UDP stack, which delivers decoded events on `udp_*`, and
the DAC serializer, which takes `dac` and `dac_valid`.

## Event format and time base

An event is `event_t = {dt[31:0], amp[15:0]}` (see `sipm_pkg`):

* `dt` is the time since the previous event, in 0.8 ns sub-phases. A zero
  `dt` puts two events in the same bin, and their amplitudes add.
* `amp` is the summed amplitude of the bin, in output LSBs per unit of
  `H`. With 800 LSB per photoelectron, a 20-photoelectron pulse peaks near
  14 500 LSB for the typical shape below.

`subphase_scheduler` adds up the `dt` values into an absolute time `t`. It
places each event in cycle `t/8 + 1` and sub-phase `t mod 8`, where cycles
are counted from the first cycle played after `run` rises. Time zero is
therefore the second played cycle.

## The sub-phase scheduler

The FIFO can deliver at most one event per cycle, but one cycle can hold up
to eight non-empty bins. The scheduler resolves this with a ring of
`SLOTS` (default 16) frames, one per future cycle. Each frame holds eight
amplitudes and eight trigger bits.

* Each cycle, at most one event is written into its frame. The add
  saturates at 65 535.
* Each played cycle, the frame of the current cycle is sent to the shaping
  core and then cleared.
* While `run` is low, nothing is played, and the ring preloads the first
  15 to 16 cycles of events.
* **Stall.** An event more than `SLOTS-1` cycles ahead waits in the
  scheduler, and the FIFO backs up behind it. `stall_cycles` counts these
  cycles.
* **Late drop.** An event whose cycle has already been played is dropped
  and counted in `late_count`. This happens only when the event stream
  falls behind real time.
* `restart` clears the ring, the cycle counter and the time base.

Because the ring preloads, a burst of several events in one cycle is
absorbed as long as the average rate stays at or below one event per cycle
(156 M non-empty bins/s).

## Shaping core arithmetic

Each bank has a pole `M = exp(-0.8 ns / τ)` for one sub-phase. Software
writes it as a 27-bit unsigned fraction, `code = floor(M · 2^27)`.

**Coefficients (`coef_gen`).** On a load, each bank computes the powers
`M^1 … M^7` for the pre-convolution, plus `P = M^8` and `P² = M^16` for the
lane recursion. It uses a chain of truncated 27×27 multiplies, one per
cycle, for 16 cycles. The finished set is then latched in a single cycle.
The datapath keeps the old set until that moment, so a reload at run time
never mixes two shapes. No multiplications are chained inside a clock
cycle.

**Pre-convolution (`preconv_bank`).** Lane `k` of cycle `n` receives

```
v_k[n] = Σ_{d=0..7} M^d · x_{k-d}[n]          (k-d ≥ 0)
                  + M^d · x_{k-d+8}[n-1]      (k-d < 0, tail from the previous cycle)
```

This is a length-8 FIR with the weights `1, M, …, M^7`. The weight 1 needs
no multiplier, so each lane uses 7 multipliers, and 3 banks × 8 lanes × 7
gives 168.

**Look-ahead lanes (`iir_lane`, `iir_bank`).** Successive samples of a lane
are eight sub-phases apart, so each lane is `y[n] = P·y[n-1] + v[n]`. That
loop would need a multiply and an add in one cycle, so it is rewritten as

```
y[n] = P²·y[n-2] + P·v[n-1] + v[n]
```

This form has the same pole and the same impulse response. The non-recursive
part `w[n] = v[n] + P·v[n-1]` is computed ahead of the loop. The loop itself
is `m <= P²·y; y <= m + w`. It has two registers, and the first one is the
place of a DSP multiplier's M register. Together the eight lanes reproduce
the sub-phase recursion `y[m] = M·y[m-1] + x[m]` exactly, up to rounding.

**Combiner (`weighted_combiner`).** For each lane it forms
`(1-S_f)·y_ff + S_f·y_fs - y_r`. `S_f` is an 18-bit value with 17 fraction
bits, and a value above 1.0 is clamped to 1.0.

**Output (`sat_interp`).** Each sample is truncated to an integer and
saturated to signed 16 bits. A midpoint is then inserted before each
sample: `dac[2k] = floor((s[k-1]+s[k])/2)` and `dac[2k+1] = s[k]`, where
`s[-1]` is the last sample of the previous cycle and `dac[0]` is the
earliest sample.

**Number formats.** The filter state is 48-bit two's complement with 16
fraction bits, where one integer unit is one DAC LSB. All products are
truncated (floor) back to this format. The 27-bit coefficients and the
16-bit output follow the source design. The other widths are choices made
here.

**Timing.** The core accepts a new frame of eight triggers every cycle
(II = 1). Its latency is 13 register stages from the trigger inputs to
`dac`:

| stage | trigger_interface | preconv_bank | iir_bank | weighted_combiner | sat_interp |
|---|---|---|---|---|---|
| registers | 1 | 4 (product + 3-level adder tree) | 3 | 3 | 2 |

13 cycles is 83.2 ns. The scheduler adds two more cycles, one for placement
and one for its output register.

## Control registers (AXI4-Lite, `axil_ctrl`)

| addr | name | contents |
|---|---|---|
| 0x00 | CTRL | [0] run, [1] source (0 = AXI, 1 = UDP), [2] load shape (pulse), [3] restart scheduler (pulse) |
| 0x04 / 0x08 / 0x0C | M_R / M_FF / M_FS | 27-bit pole codes |
| 0x10 | S_F | 18-bit slow fraction, 1.0 = 0x20000 |
| 0x14 | EVT_DT | dt of the next event |
| 0x18 | EVT_AMP | amplitude; the write pushes the event |
| 0x1C | STATUS | [0] shape load busy, [31:16] FIFO level |
| 0x20 / 0x24 / 0x28 / 0x2C | LATE / N_PS / N_UDP / STALL | counters |

Each event from the processor takes two writes. A push is held in the AXI
write channel until the previous event has been accepted.

The source select is exclusive: `event_source_mux` forwards either the AXI
events or the UDP events, never both at once. `dt` is relative to the
previous event, so interleaving two independent streams would break both
time bases. Switch the source only while the stream is idle, for example
together with a scheduler restart.

A typical session:

1. Write the three pole codes and `S_F`.
2. Write CTRL with the load bit set, and poll STATUS[0] until it reads 0.
3. Queue events while `run` is 0, so that the ring and the FIFO preload.
4. Set `run`.

## Verification

Each block has a self-checking testbench in `tb/`, named `tb_<module>`.
Each ends by printing `TB_RESULT checks=N failures=M`.

* `tb_shaping_core` compares every DAC sample with a double-precision model
  of the sub-phase recursion, within 2 LSB. It covers impulses at all
  eight sub-phases, a dense random stream with pile-up at one frame per
  cycle, saturation and a runtime shape reload. It also checks the
  13-cycle latency.
* `tb_sipm_emulator_top` runs the whole channel at its default sizes. It
  covers three cases:
  * a 20-photoelectron event pushed over AXI;
  * the pile-up case with 20, 15 and 25 photoelectrons at 10, 80 and
    200 ns, sent over UDP after a source switch;
  * a saturating pulse after a reload to a scintillator-like shape, plus a
    late event.

  Every sample is compared with the binned model; the largest difference
  is 1 LSB. Samples on the body of each pulse are also compared with the
  ideal, unbinned `H(t)` summed over the raw photon times. The largest
  relative error is 0.6 % for the single event and 0.8 % for pile-up. The
  test also counts source switches, stalls, late drops, bin merges, shape
  reloads, saturation and FIFO buffering, and fails if any of them never
  happened.
* The unit testbenches check their blocks against models written
  independently of the RTL:
  * integer power chains and `exp()` for `coef_gen`;
  * a bit-exact FIR for `preconv_bank`;
  * the plain one-pole recursion for `iir_bank`;
  * queue scoreboards for the FIFO and the source mux;
  * frame reconstruction from absolute event times for the scheduler;
  * register and back-pressure checks for `axil_ctrl`.

To run one testbench with Verilator (the package must come first):

```
verilator --binary --timing --assert rtl/sipm_pkg.sv rtl/*.sv tb/tb_shaping_core.sv \
          --top-module tb_shaping_core -o sim && ./obj_dir/sim
```

Verilator warns about the duplicate package file on that command line, and
the warning is harmless. The testbenches use only `$urandom`, with no
constraint solver. They finish in seconds.

## Where this RTL departs from, or goes beyond, the source design

* **Hand-written RTL.** The original core was produced by high-level
  synthesis. This is hand-written RTL with the same structure, and its 13
  pipeline stages were placed so that the total matches the reported
  latency. It does not instantiate DSP48E2 primitives. Widths and register
  placement map naturally onto them, but the signed 27-bit DSP port would
  hold one fraction bit less than the unsigned 27-bit coefficients used
  here.
* **Pole per lane.** The look-ahead recursion is stated for a filter
  `y[n] = M·y[n-1] + x[n]` with `M = exp(-0.8 ns/τ)`. Each lane here
  advances by a whole cycle, eight sub-phases, so its recursion uses
  `P = M^8` and `P² = M^16`. The pre-convolution uses `M^1 … M^7`.
* **Coefficients computed in hardware.** The powers of `M` are computed
  here from the single pole that software programs. They could equally be
  written by software.
* **Own design choices.** The following are choices made in this design:
  the scheduler's ring, preload, stall and late-drop policy; the exclusive
  source selection; the AXI register map; the FIFO depth (512); the event
  word widths; the `S_f` format; the output rounding; and the interpolated
  sample order.
* **Not included.**
  * the Ethernet/UDP receiver (it would feed `udp_*`);
  * the DAC data interface;
  * the processor software;
  * the noise, gain/offset and trigger/amplitude generators of a
    general-purpose detector emulator;
  * a second output channel. The board has two DACs; replicate
    `shaping_core` (or the whole top) per channel.
* **Throughput limit.** The scheduler takes at most one event per cycle,
  while the shaping core can take eight triggers per cycle. Sustained rates
  above 156 M non-empty bins per second therefore need a wider
  FIFO-to-scheduler path.

## Files

* `rtl/sipm_pkg.sv`: shared types and widths.
* `rtl/<module>.sv`: one module per file.
* `tb/tb_<module>.sv`: the testbenches.

`sipm_emulator_top` is the top level. Its parameters are `FIFO_DEPTH` and
`SCHED_SLOTS`.
