# Digital LLRF controller for a rapid-cycling synchrotron RF system

In a rapid-cycling synchrotron the RF frequency is not fixed. Here it sweeps
from 1.022 MHz at injection to 2.444 MHz at extraction in 20 ms, and the
sweep repeats 25 times a second. Over that sweep the ferrite-loaded cavity has
to be retuned, its gap voltage has to follow a programmed curve, its phase has
to stay on the reference, and the beam current loads it more and more.

The controller described here runs one such RF system from a single FPGA
clocked at 40 MHz. Everything rests on one idea. A numerically controlled
oscillator (DDS) sweeps with the beam and serves as the reference. Every RF
signal is sampled directly and multiplied by that swept reference, so it
arrives at baseband whatever the carrier frequency is at that moment. All
loops then work on slowly varying numbers: amplitude and phase for each
signal. Because the 20 ms cycle repeats identically, each loop can learn from
the last cycle. A feedforward table, indexed by time within the cycle,
pre-compensates whatever the feedback had to fight the time before.

Seven loops are built:

| loop | measures | acts on |
|---|---|---|
| cavity voltage | cavity amplitude vs. pattern | drive amplitude (feedback + learned feedforward) |
| cavity phase | cavity phase vs. reference | drive phase |
| synchronous phase | beam phase (FCT) vs. cavity phase | damping vector 90° to the drive |
| cavity tune | cavity phase vs. tetrode grid phase | cavity bias supply (feedback + learned feedforward) |
| tetrode grid tune | grid phase vs. drive phase | grid-circuit bias supply (feedback only) |
| beam loading compensation | beam fundamental (WCM) | drive vector, opposite phase |
| orbit feedback | beam position (BPM) | frequency tuning word |

The eighth loop of such a system, the direct RF feedback around the final
amplifier, is analog. It is not part of this RTL.

## Clock and number formats

The whole design runs on one 40 MHz clock, the sample clock of the ADCs and
the DAC. All types are defined in `llrf_pkg`:

- `sample_t`: a 16-bit signed converter sample.
- `phase_t`: a 16-bit two's complement angle, where 2^16 counts are 360°
  (0.0055° per count). Phases are subtracted in this type and wrap naturally.
  A phase error is therefore always the short way round, within ±180°.
- `amp_t`: a 16-bit unsigned amplitude, in ADC counts.
- `iq_t`: a baseband vector with 18-bit signed I and Q.

Loop gains are 16-bit signed register values:

- Proportional gains are scaled by 2^-8.
- Integral gains are scaled by 2^-16 per clock.
- The feedforward error factor is scaled by 2^-8.

## Swept reference and direct demodulation

`dds` holds a 32-bit phase accumulator. It adds the frequency tuning word
every clock, so f = ftw · 40 MHz / 2^32, with 0.0093 Hz resolution.

- The tuning word comes from the frequency pattern plus the orbit correction.
- The injection trigger clears the accumulator. The reference therefore starts
  each cycle with the same phase, and the phase loop works against a
  repeatable origin.
- The accumulator's top 16 bits drive a rotation-mode CORDIC (`cordic_rot`).
  It outputs cos and sin at amplitude 32000, with no ROM.

`sig_chain` is one measurement channel. The top has five of them: cavity
voltage, tetrode grid voltage, fast current transformer, wall current
monitor, and the DAC output itself. Each channel works in three steps:

1. `iq_demod` multiplies the sample by cos and by -sin of the reference, which
   gives I and Q. The products contain the wanted baseband term plus a term at
   twice the carrier. Twice the carrier is at least 2.04 MHz in this machine.
2. Two `fir_lpf` filters, 70 taps each, remove the 2f term. At 40 MHz the
   70-tap window spans 1.75 µs, and the group delay is half of that.
   - The default coefficients are a Hamming-windowed sinc with a 200 kHz
     cut-off, scaled so the taps sum to 2^16 (unity DC gain).
   - They give about -46 dB at 2.04 MHz.
   - The coefficient set is a parameter and can be replaced.
   - The filter is in transposed form: one multiplier per tap, one output per
     clock.
3. `cordic_vec`, a vectoring-mode CORDIC, turns the filtered I/Q into
   amplitude and phase.

The CORDICs are the most delicate arithmetic in the design:

- Both are pipelined with 16 micro-rotations.
- The angle is carried internally with 20 bits (2^20 = 360°). Its arctangent
  table is written out as integer constants: round(2^20 · atan(2^-i) / 2π).
- A quadrant pre-rotation brings every input into ±90° before the iterations
  start.
- The CORDIC gain (1.6468) is removed by one multiplication by 19898/2^15.
- `cordic_rot` keeps 4 guard bits below the output LSB and rounds at the end.
  Without them the truncation error of 16 shift-and-add stages reaches several
  LSB.
- Both have a latency of STAGES+2 clocks.

The end-to-end delay from an ADC sample to amplitude and phase is about 57
clocks (1.4 µs): 1 for demodulation, 35 for the filter's group delay, 18 for
the CORDIC and a few registers. This delay, plus another CORDIC and the
modulator on the output side, limits how high the loop gains can go (see
"Loop gains and stability").

## Cycle pattern

`pattern_gen` divides the 20 ms acceleration into 2048 bins of 391 clocks
each (20.02 ms in all). For each bin it holds three host-loaded tables:

- the frequency tuning word (32 bits),
- the voltage setpoint (16 bits),
- the synchronous phase setpoint (16 bits).

The injection trigger starts a cycle. From then on the block outputs:

- `bin`, the current bin number;
- `strobe` on the last clock of every bin;
- `cyc_start` and `cyc_end`;
- the table values of the current bin, registered.

Outside a cycle, bin 0's values are held, so the cavity idles at injection
conditions. The bin number and strobe are the time base of every feedforward
table and of the capture buffer.

## The loops

### Cavity voltage loop (`amp_loop`)

The loop error is the voltage pattern minus the measured cavity amplitude.
How the drive is formed depends on the two enables:

- Feedback on: a PI controller (`pi_ctrl`) produces the drive amplitude. Its
  integrator is clamped, so it does not wind up.
- Feedforward on: the table value for the current bin is added to the drive.
- Both off: the setpoint passes straight through as the drive.

The drive is limited to DAC full scale. How the table learns is described in
the next section.

### Feedforward learning (`ff_table`)

This is the mechanism that makes the 20 ms sweep work. The bias supplies and
the cavity cannot follow the fast ramps on feedback alone. The table has one
entry per bin and is updated once per bin, at the strobe, while learning is
enabled. Two arrays take part:

    avg[bin] <- avg[bin] + (u - avg[bin]) / 4      (average of past cycles' actuator value)
    ff[bin]  <- avg[bin]_new + kff * err / 2^8     (plus the error times a factor)

The two variables are:

- `u` is the value the actuator actually had in this bin. For the voltage
  loop this is the drive amplitude. For the cavity tune loop it is the
  measured bias current minus the base value.
- `err` is the loop error at the end of the bin.

The average makes the table converge to what the feedback needed. The error
term pushes the table further in the direction that removes the remaining
error. Over cycles the feedback then has less and less to do.

Two details matter in the top:

- **Integrator clearing.** With feedforward on, the loop integrators are
  cleared at every cycle start. The table already contains the integrator's
  contribution from earlier cycles. An integrator left over from the end of
  the last cycle would add it a second time, at the wrong bin.
- **Learning window.** Learning is enabled only while a cycle is active, so
  the idle time between cycles does not pollute bin 0.

In the end-to-end test, the first cycle's voltage error is tens of percent
while the loops pull in. By the eighth cycle it is within 1% everywhere in the
settled part of each bin.

### Cavity phase loop (`phase_loop`)

The error is the reference phase (zero) minus the measured cavity phase, and
a PI law gives the drive phase.

The integrator wraps modulo 360°. A saturating integrator would stop at ±180°
and could not follow an arbitrary fixed offset, such as cable and amplifier
delay.

The loop is much faster than the tune loops: it corrects the phase shift that
detuning produces before the tune loop has removed the detuning.

### Synchronous phase loop (`sync_phase_loop`)

The beam phase comes from the fast current transformer channel. The loop
works in four steps:

1. Compare the beam phase with the cavity phase, and subtract the
   synchronous phase setpoint of the pattern.
2. Remove the slowly varying part with a first-order high-pass (an average
   with a 2^16-clock time constant). What remains is the synchrotron
   oscillation.
3. Scale the oscillation by `kd / 2^8`. The result is a signed damping
   amplitude.
4. `iq_mod` adds this amplitude to the drive as a vector at the drive phase
   +90° (positive) or -90° (negative).

A quadrature component changes the drive phase in proportion to the
oscillation, which damps it.

### Tune loops (`tune_loop`, instantiated twice)

Both tune loops measure the phase across a resonant circuit and move a bias
supply until it has the setpoint phase.

- **Cavity tune loop** (`FF=1`):
  - It compares the cavity voltage phase with the tetrode grid voltage phase,
    which is the phase across the cavity.
  - Output = base bias command + PI + feedforward table.
  - The table learns from the measured bias current relative to the base, and
    from the phase error.
- **Grid tune loop** (`FF=0`, feedback only):
  - The tetrode input circuit is broad-band compared with the cavity.
  - It compares the grid voltage phase with the phase of the RF drive the
    controller sends out.
  - That drive phase is measured by a fifth `sig_chain` on the DAC samples.
    Both phases therefore pass through identical processing, and their
    difference contains no filter or CORDIC delay.

The bias commands are 16-bit numbers. The amperes per count belong to the
supply.

### Beam loading compensation (`blc_ff`)

The wall current monitor channel delivers the beam current's fundamental as a
baseband vector. `blc_ff` multiplies it by a complex gain (Q2.14, set by the
host: magnitude and phase at once) and negates it. The result is added to the
drive vector, so the drive already supplies the beam-induced voltage with the
opposite sign.

### Orbit feedback (`orbit_fb`)

The beam position (a signed number from the BPM electronics) minus its
setpoint is integrated once per bin: `off += (pos - sp) · k / 2^4`, clamped to
±2^24. The result is added to the DDS tuning word, so a radial offset slowly
corrects the frequency program. Turning the loop off clears the correction.

### Drive synthesis (`iq_mod`)

The drive is built at baseband as the sum of three vectors:

- the voltage-loop amplitude at the phase-loop phase;
- the damping vector at ±90° to it;
- the beam loading vector.

Two rotation CORDICs produce the first two; the third is already a vector. The
sum is then modulated onto the DDS reference:

    rf = I·cos − Q·sin

The result is saturated to the 16-bit DAC.

## Time slots, capture and host access

The machine cycle is 40 ms. The first 18 ms are a waiting time, split into
eight 2.25 ms slots, one per carrier board sharing a data bus. The remaining
22 ms are operating time.

`slot_timer` counts the cycle from the event trigger. It provides:

- `upload` during the waiting time;
- `my_slot` and `my_start` for the board's own slot, chosen by `carrier_id`;
- `operating` for the operating time.

The data bus is not built here. The top brings the slot timing out for it:
`upload_en` (own slot), `upload_start` (its first clock) and `op_time`.

`capture_buf` records four numbers at the end of every bin: amplitude error,
phase error, cavity tune error and grid tune error. It has two banks of
4 × 2048 × 16 bits:

- The banks swap at each cycle start.
- The host reads the completed bank while the next cycle writes the other.
- `ready` says the read bank holds a complete cycle.

Host bus of the top: a 16-bit address, 32-bit write data (the tuning words
need 32 bits) and 16-bit read data; reads return one clock
after the address.

| address | content |
|---|---|
| 0x0000–0x0013 | registers (below), 16 bits |
| 0x2000 + bin | frequency tuning word table (write) |
| 0x4000 + bin | voltage setpoint table (write) |
| 0x6000 + bin | synchronous phase table (write) |
| 0x8000 + ch·0x800 + bin | capture buffer, channel ch (read) |

| reg | meaning | reg | meaning |
|---|---|---|---|
| 0 | enables, bit 0..9: amp, amp_ff, ph, sync, ctune, ctune_ff, gtune, blc, orbit, ff_learn | 10, 11 | grid tune kp, ki |
| 1, 2, 3 | voltage kp, ki, kff | 12, 13 | cavity / grid tune phase setpoint |
| 4, 5 | phase kp, ki | 14, 15 | beam loading gain re, im (Q2.14) |
| 6 | synchronous damping kd | 16, 17 | orbit gain, position setpoint |
| 7, 8, 9 | cavity tune kp, ki, kff | 18, 19 | cavity / grid bias base command |

All registers reset to zero, so every loop is off after reset.

## Loop gains and stability

From the DAC to a fresh amplitude/phase measurement there are about 100
clocks of delay (2.5 µs). The parts are:

- the modulator CORDIC;
- the plant;
- the ADC;
- the 70-tap filter;
- the vectoring CORDIC.

The PI loops are therefore digital loops with a large dead time. With a plant
of unity gain, the integral gain per clock must stay well below 1/100, or the
loop rings.

The end-to-end test uses these gains (register values):

- voltage: kp 64, ki 256, kff 128;
- phase: kp 64, ki 128;
- damping: kd 64;
- tune loops: kp 64, ki 128 (cavity kff 128).

Feedforward is what lets gains this low meet the regulation targets. A larger
damping gain is not free: the damping vector modulates the drive phase, which
the phase loop then sees as a disturbance. The bandwidths have to stay
ordered: phase loop fastest, tune loops slower, learning slowest (once per
bin per cycle).

## Verification

Every block has a self-checking testbench in `tb/`. Each drives random or
swept stimulus, compares with values computed independently in the bench
(real arithmetic for the CORDICs, the filter response, and the DDS sine), and
prints `TB_RESULT checks=N failures=M`. Their checks include:

- CORDIC accuracy: rotation within 3 LSB; vectoring within 4 LSB of amplitude and
  4 counts (0.02°) of phase;
- the filter against a direct convolution, a DC step settling exactly 70 clocks
  after it enters, and a 2.044 MHz tone attenuated below 1%;
- DDS frequency and phase reset;
- the pattern bin timing (391 clocks per bin);
- the 2.25 ms slot and 40 ms cycle counts;
- feedforward learning reducing the error tenfold over cycles;
- the register map and capture bank swapping.

The end-to-end benches close all loops around `rf_plant_model`, a behavioural
baseband model in `tb/`:

- a cavity whose resonance follows its bias current;
- a tetrode grid circuit that does the same;
- a beam whose current ramps up and whose phase carries a small synchrotron
  oscillation.

It is the bench's own simplification. It is not a model of the real ferrite
cavity.

- `tb_llrf_top` runs 8 cycles with 16 bins of 2000 clocks. It checks the
  last cycle against ±1% amplitude and ±1° phase in the settled part of each
  bin, and the tuning errors against 5°. It also counts that every mechanism
  happened:
  - cycle start;
  - reference reset;
  - bin strobes;
  - table learning, and its use for both voltage and tuning;
  - both bias supplies moving;
  - phase correction;
  - damping;
  - beam loading;
  - orbit correction;
  - an upload slot and the operating time after the slots;
  - capture ready with the right data read back.

  Last-cycle result: amplitude within 1%, phase error about 0.5°, tuning
  errors well under 1°.
- `tb_llrf_full` runs the top with every parameter at its default: 2048 bins
  of 391 clocks, 70 taps and a 40 ms cycle with its 2.25 ms slots. It covers
  one full 20 ms acceleration cycle. That covers the first half of the 40 ms
  data cycle, with all eight 2.25 ms upload slots and the start of the
  operating time. It checks the same bounds (phase error about 0.55° in that first,
  still-learning cycle). It takes about 9 s of wall-clock time.

- `tb_llrf_ff_compare` runs the same reduced setup twice. First come two
  cycles with feedback only: both feedforward paths and learning are off.
  Then come eight cycles with feedforward learning on. It checks that
  feedforward at least halves both the voltage error and the cavity tuning
  error, and that the voltage error ends within 1%.

  In the model, feedback alone loses the sweep completely: about 95%
  voltage error and 100° tuning error. The reason is that the tune command
  starts from a fixed base while the resonance current triples. With the
  tables the errors are 0.75% and 0.4°. The plant is much harsher without
  feedforward than a real cavity with its fast analog RF feedback. The
  comparison shows the direction of the effect, not its size on a machine.

To simulate with plain Verilator (5.x), from the directory that holds `rtl/`
and `tb/`:

    verilator --binary --timing -Wno-fatal -y rtl -y tb --top-module tb_llrf_top \
        rtl/llrf_pkg.sv tb/tb_llrf_top.sv -o sim && ./obj_dir/sim

Replace the top module name to run any other bench.

## Where this design goes beyond, or departs from, the description it follows

Taken from the system description:

- the 40 MHz sampling;
- direct I/Q demodulation against a DDS reference;
- the 70-tap FIR low-pass;
- CORDIC amplitude/phase;
- the reference reset at injection;
- the seven digital loops and their inputs;
- feedforward built from past cycles' actuator values plus the error times a
  factor;
- the feedback-only grid tune loop;
- the 2.25 ms slots of eight carriers in a 40 ms cycle;
- 16-bit converters;
- the regulation targets.

This design's own choices:

- **Numbers and widths:** all word widths and fixed-point scalings.
- **Coefficients and tables:**
  - the FIR coefficients;
  - the 2048-bin division of the cycle;
  - the exponential form of the "average of past cycles".
- **Control laws:**
  - the PI law of every feedback loop;
  - the high-pass in the synchronous phase loop;
  - the complex-multiplier form of the beam loading gain;
  - the integral orbit law acting on the tuning word.
- **Top-level wiring:**
  - the fifth demodulation channel used for the grid tune loop;
  - clearing the integrators at cycle start;
  - the register and address map;
  - the capture contents;
  - the double-buffered capture.

Not included:

- the analog RF feedback;
- the ADC/DAC chips;
- the clock PLL (the design expects 40 MHz directly);
- the on-board DSP, DDR3 memory, Ethernet and fibre links;
- the shared LVDS data bus and the CPCI bridge (only the slot timing and a
  simple register/table bus are provided);
- the host software.

The converters on the carrier can run faster than 40 MHz. The design fixes
the sample rate at 40 MHz, the rate at which the signals are processed.
