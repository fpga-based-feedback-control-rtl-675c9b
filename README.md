# A reconfigurable DSP block for FPGA feedback control (PyRPL-style)

This is the signal-processing core of a digital feedback controller for
optics experiments. It sits between the two 14-bit, 125 MS/s ADCs and the two DACs
of a Red Pitaya-class board. The controller works on one sample per
125 MHz clock. Its building blocks are:

* three PID controllers;
* three IQ modulator/demodulators, which serve as lock-in amplifier,
  network analyser, narrow band-pass filter, Pound-Drever-Hall
  error-signal generator and phase detector;
* one IIR filter of up to 28th order;
* two arbitrary signal generators;
* a two-channel oscilloscope.

None of these modules is wired to the others permanently. A run-time multiplexer
connects any module's input to any other module's output, or to an ADC,
or to a DAC value. A per-module summation stage then adds whatever each
module sends to the two DACs. Every setting is a register on a simple
32-bit bus. The host can therefore rebuild a complete control loop (for example
"ADC1 -> IQ demodulator -> CORDIC phase -> PID -> PID -> DAC2") in a few
register writes, without rebuilding the FPGA design.

The architecture, the module set and the key numbers are those of the
open-source PyRPL project as described in its publication: 14-bit signals,
2^11 x 17-bit quarter-wave sine table, 32-bit phase accumulators, 24-bit
quadratures, 62-bit network-analyser accumulators, CORDIC phase with turn
counting, 14 biquads in 3.29 fixed point, 2^14-sample waveforms and scope
buffers, and 2^n averaging with n <= 16.
The publication describes what each module does but gives little of how.
The bit-level design here is therefore this implementation's own: the
fixed-point scalings, pipelines, register map, bus protocol, trigger
encodings and state machines. Each RTL file begins with a comment that
separates the two.

## Signal routing

```
            +-------------------- DSP multiplexer (16 slots) ---------------------+
  adc1 ---> | slot 9                                                             |
  adc2 ---> | slot 10        input_select[s] picks which slot's output_signal    |
  dac1 ---> | slot 11        feeds module s (registered, 1 clock)                |
  dac2 ---> | slot 12                                                            |
            +--+-----+-----+-----+-----+-----+----------+-------------------------+
               |     |     |     |     |     |          |
            PID0-2  IQ0-2  IIR  ASG0-1(no input)      scope ch1/ch2 (slots 13/14)
               |     |     |     |
      output_direct of every module, output_select[s] = {to out2, to out1}
               |     |     |     |
            +--v-----v-----v-----v--+
            |  summation, saturate  | --> dac1, dac2   (registered, 1 clock)
            +-----------------------+
```

Slot numbers are: 0-2 PID, 3-5 IQ, 6 IIR, 7-8 ASG, 9/10 in1/in2, 11/12
out1/out2 (reading back the DAC values), 13/14 the scope's channel selects,
and 15 the constant zero.

Each module has two outputs:

* `output_signal` goes back into the multiplexer.
* `output_direct` goes to the summation.

For the PID, IIR and ASG the two are identical. For the IQ module,
`output_direct` is the re-modulated sine, and `output_signal` is one of
three things: the quadrature, `output_direct`, or the CORDIC phase.

The summation uses a wide adder and saturates to the 14-bit range, so two
sources that overflow a DAC clip instead of wrapping.

## Number formats

All signals are 14-bit two's complement. Gains are fixed point:

| quantity | width | unity | module |
|---|---|---|---|
| PID p, d | 24 bit signed | 2^12 (p), 2^10 per clock (d) | `pid` |
| PID i | 24 bit signed | 2^32 in the integrator: i = 2^22 adds 1/1024 of the error per clock | `pid` |
| IQ gain, quadrature_factor | 16 bit signed | 2^12 | `iq_module` |
| IIR coefficients | 32 bit signed | 2^29 (3.29 format) | `iir` |
| ASG scale | 16 bit signed | 2^13 | `asg` |
| first-order filter | 5-bit shift n | corner = 125 MHz / (2 pi 2^n) | `first_order_filter` |

The first-order filters are used in many places: the PID pre-filters, the IQ
input high-pass, the IQ quadrature low-passes and the IIR anti-alias
filter. Each one is a single leaky integrator,
`s += ((x << F) - s) >> n`. The high-pass output is `x - lowpass`.
Corners are therefore powers of two apart. This is cheap (no multiplier),
but a requested corner such as 3 MHz can only be approximated: shift 3
gives 2.49 MHz and shift 2 gives 4.97 MHz.

## The IQ module

The IQ module is the most intricate part, and the one whose scalings matter most.

Oscillator. A 32-bit phase accumulator advances by `frequency` each clock,
so f = frequency x 125 MHz / 2^32. Its top 13 bits address a quarter-wave
table of 2^11 17-bit entries. Entry i holds round((2^17 - 1) sin((i + 0.5)
pi / 2^12)); the half-step offset makes the quarter wave symmetric. The two top
bits fold the address and set the sign. The table has four read ports. Two give
sin and cos of (wt + phase) for demodulation. Two give sin and cos of wt for
re-modulation. The table is filled by an `initial` loop using `$sin`, so no
data file is needed.

Demodulation. The input, optionally high-passed (`ac`), is multiplied by
the two shifted sines. Each product is kept at 24 bits (shift 7). It then passes
two first-order low-pass stages, which can be disabled one by one. A tone
of amplitude A at the oscillator frequency gives quadratures of magnitude
A x 2^9. The extra bits are the averaging gain that narrow filters provide.

The quadratures feed four consumers in parallel:

* Quadrature output: `quad1 x quadrature_factor >> 21`. With factor 1.0 this
  is A cos(angle) in input LSB.
* Re-modulator (band-pass / excitation):
  `(quad1 x gain >> 21 + amplitude) x sin(wt) + (quad2 x gain >> 21) x cos(wt)`.
  Setting gain = 0 and amplitude != 0 gives a clean excitation tone
  (network-analyser mode). Setting amplitude = 0 and gain != 0 gives a
  band-pass filter centred on `frequency`; its width is set by the low-pass
  corners, and its phase lag by `phase`. With gain 1.0 a centre-frequency tone
  passes with unity amplitude.
* Network analyser: a write to the `frequency` register starts a point.
  For `sleep_cycles` clocks the system under test settles. For `na_cycles`
  clocks both quadratures are summed into two 62-bit accumulators. Then
  `done` rises. The host reads the sums and divides by `na_cycles`.
  Writing the same frequency again measures another point at that
  frequency ("zero span").
* CORDIC phase detector, with I = quad2 and Q = quad1:
  * The signs give the quadrant.
  * A pseudo-rotation by pi/4 and nine shift-and-add stages (angles 302,
    160, 81, 41, 20, 10, 5, 3, 1 in units of 2 pi / 4096) give the angle
    within the quadrant.
  * The output is a 14-bit word {turn[1:0], quadrant[1:0], fine[9:0]}, with
    one LSB = 2 pi / 4096.
  * A quadrant step 3 -> 0 or 0 -> 3 moves a 2-bit turn counter, so the
    phase extends over -4 pi..4 pi.
  * At the ends the counter holds instead of wrapping. When the true phase
    runs away during lock acquisition, the error therefore falls back by
    2 pi but keeps its sign, so a phase-locked loop still pulls in the
    right direction.

Latencies: about 8 clocks from input to `output_direct`, and one clock for
the CORDIC. The network analyser's `done` comes sleep + na + 2 clocks
after the frequency write.

## The IIR filter

The filter is a sum of second-order sections:

H(z) = sum_j (b0_j + b1_j z^-1) / (1 + a1_j z^-1 + a2_j z^-2)

Each section is y_j(n) = b0 x(n) + b1 x(n-1) - a1 y_j(n-1) - a2 y_j(n-2).
A constant feed-through is simply a section with only b0 set.

There is one biquad datapath, time-multiplexed. With `loops` = L
(1..14), it evaluates one section per clock, adds the section outputs
and produces a new output every L clocks. The sample rate is thus
125 MHz / L. A first-order low-pass in front limits aliasing at that
reduced rate. Coefficients are written one at a time over the bus
(section, index: 0 b0, 1 b1, 2 a1, 3 a2).

Internally:

* The input carries 10 extra fractional bits.
* Section states are 40 bits and saturating.
* The products keep the full 32 x 40 bits before the 29-bit shift.

A filter with 10 complex pole/zero pairs, as used to cancel piezo
resonances, needs L = 10. It then runs at 12.5 MHz, with at most 20 clocks
(160 ns) from an input sample to the output that contains it.

## PID

The PID computes e = in - setpoint after four series first-order
pre-filters. Each pre-filter can be a low-pass or a high-pass, or be switched off.

* P = p e >> 12.
* D = d (e(n) - e(n-1)) >> 10.
* The integrator accumulates i e in a 48-bit register. It is read with a
  32-bit shift, and is clamped so that its contribution cannot exceed the
  output range (anti-windup).

Writing `ival` loads the integrator directly. This resets the output to a
chosen value, and lets the host generate ramps by rewriting ival. The sum
P + I + D is saturated to [out_min, out_max]. The latency is 7 clocks:
4 filter stages plus error, product and output registers.

## Arbitrary signal generator

Each channel has:

* a 2^14-entry table, written over the bus;
* a 30-bit pointer (14 index + 16 fractional bits) advanced by `step`
  each clock. The pointer wraps after entry `last`, so the frequency is
  step x 125 MHz / ((last + 1) x 2^16): from 0.116 Hz (step 1, full table)
  to 62.5 MHz.

The output is sample x scale / 2^13 + offset, saturated.

A small state machine (idle / waiting / running / done) handles the
sequencing:

* Triggers: immediate, rising edge of the external trigger, or software.
* `on_delay` clocks pass between the trigger and the start.
* The channel stops after `cycles` periods (burst mode) or after
  `off_delay` clocks.
* While it is not running, the output is `offset`.

A noise mode replaces the table with the top 14 bits of a Lehmer generator,
x <- 69069 x mod 2^30. With an odd state its period is 2^28 clocks
(2.1 s).

## Oscilloscope

The scope has two 2^14-point buffers. With decimation 2^n (n = 0..16),
each point is the mean of 2^n samples.

Arming clears the write pointer and waits for a trigger. The sources are
immediate, a ch1/ch2 rising or falling threshold crossing, the external
trigger, or a software trigger at any time. A threshold trigger is armed
only after the signal has been beyond threshold -/+ hysteresis. This
suppresses re-triggering on noise.

At the trigger the scope stores the write pointer (`trig_ptr`) and a
64-bit clock-count time stamp. It then records until point
`trig_ptr + trig_delay` is written and raises `done`. The samples before
`trig_ptr` that are still in the circular buffer are the pre-trigger
history. Rolling mode records continuously. Buffer reads go through the
bus, with one clock of read latency.

## Register bus and address map

The bus carries one 32-bit word per request:

* A request is a single clock with `sys_wen` or `sys_ren`.
* `sys_ack`, with `sys_rdata` for reads, follows exactly one clock later.
* `sys_err` comes with the ack when no register answers the address.

Bits 23:20 of the address select the region:
scope 0x1, ASG 0x2, DSP modules 0x3. For DSP modules, bits 19:16 give the
multiplexer slot, and every slot has `input_select` at 0x00 and
`output_select` at 0x04. The full map is in the header of
`rtl/dsp_regs.sv`. Writes that start an action produce one-clock strobes:
frequency (starts a network-analyser point), ival, table and coefficient
writes, arm, and software triggers.

## Files

| file | contents |
|---|---|
| `rtl/pyrpl_pkg.sv` | widths, slot numbers, configuration structs, saturation helper |
| `rtl/pyrpl_top.sv` | the whole block: regs, mux, 3 PID, 3 IQ, IIR, 2 ASG, scope, summation |
| `rtl/dsp_regs.sv` | bus decoder and configuration registers |
| `rtl/dsp_mux.sv`, `rtl/out_sum.sv` | multiplexer and DAC summation |
| `rtl/first_order_filter.sv` | shift-based low-/high-pass |
| `rtl/pid.sv` | PID controller |
| `rtl/iq_module.sv`, `rtl/iq_sine_lut.sv`, `rtl/cordic_phase.sv`, `rtl/na_accumulator.sv` | IQ module and its parts |
| `rtl/iir.sv` | time-multiplexed biquad IIR |
| `rtl/asg.sv`, `rtl/lehmer_prng.sv` | signal generator and noise source |
| `rtl/scope.sv` | oscilloscope |
| `tb/tb_*.sv`, `tb/tb_util.svh` | self-checking testbenches and their check macros |

The top's ports are the two ADC inputs, the two DAC outputs, an external
trigger and the register bus. The processor, the bus bridge and the ADC/DAC
interface of the board connect there. The board's slow PWM outputs are not
part of this block.

## Verification

Every module has a self-checking testbench. Each one prints
`TB_RESULT checks=N failures=M` and stops itself on a watchdog. Reference
values are computed independently inside the testbench: real-valued sines,
64-bit integer recurrences, or hand-worked fixed-point results. Among
other things the testbenches check:

* the sine table against `$sin` for all 8192 phases of every port;
* the CORDIC angle against `$atan2` on 400 random vectors (within 3 LSB),
  and the turn counter over six turns each way, including its hold at
  +-4 pi;
* the IQ module's unity-gain band-pass and its off-centre rejection, a
  90 degree phase step (1024 LSB), and the network analyser's magnitude;
* PID latency (7 clocks), slopes, the ival load and saturation;
* the IIR output rate (one update per `loops` clocks) and its response
  against a real-valued model;
* ASG playback, scale, bursts and on/off delays;
* scope triggers, pointers and averaging: a +-1000 alternating input
  averages to 0, and 2^16 samples of a constant come back unchanged;
* bus read-back, strobes and errors.

`tb_pyrpl_top` runs the complete block at its default size, using only
the bus and the ADC inputs. It covers, in order:

1. DAC summation and saturation;
2. ASG playback onto out1;
3. a scope acquisition triggered on that signal and read back;
4. an ASG burst;
5. in1 -> PID -> out2, a live re-routing to in2, and an ival load;
6. in1 -> IIR -> out2 with feedback;
7. a network-analyser point measured through an out1 -> IQ loop;
8. ten 90 degree phase steps through the CORDIC, past +-pi;
9. a bus error.

It counts each mechanism and fails if any of them never occurred.

`tb_workloads` runs five of the applications the block was built for,
again on the full-size block and only through the bus:

1. **PDH-type demodulation.** A 50 MHz tone goes out on out2, is looped
   back, and is demodulated with a second-order low-pass at 2.5 MHz. The
   quadrature follows A cos(phi - phi0), with A = 3000 LSB, while the
   demodulation phase is stepped in 45 degree steps. The 100 MHz product
   leaves a ripple of about 1 %.
2. **A 15 MHz band-pass with a 2.4 kHz corner,** built from one IQ module.
   A second IQ module measures it as the network analyser, all inside the
   FPGA. Measured: |H| = 1.000 at the centre and 0.707 with -45 degrees
   one corner away; 0.100 ten corners away. The response rotates by
   120 degrees per 120 degree step of the phase register.
3. **A phase-locked loop** on a modelled beat note, 1.25 kHz off a 9 MHz
   reference. The chain is IQ (CORDIC phase) -> PI on out1 (fast) ->
   I on out2 (slow) -> a third PID as the "temperature" stage. The loop
   locks to within 3 LSB. The slow output takes over the whole offset, so
   the fast one returns to about zero. A 60 degree setpoint step moves the
   beat-note phase by 1/6 cycle.
4. **An IIR filter of ten resonant pole pairs,** spread from 250 kHz to
   2.5 MHz with section gains of alternating sign, at `loops` = 10. The
   output updates every 10 clocks (12.5 MHz). For a 1000 LSB tone at five
   frequencies, its amplitude follows the ten-section model. The model's
   |H| ranges from 0.055 to 3.56, and the measured amplitude stays within
   3 LSB of it.
5. **The transfer function of a running lock, measured in the loop.**
   * An integrator with 20 kHz unity gain drives out2 through a modelled
     actuator. The actuator is a 50 kHz low-pass that feeds back to in1.
   * The network analyser adds its tone to out2 through the output
     summation, and it also measures out2.
   * The closed-loop response is 0.25 at 5 kHz and 1.02 at 200 kHz. The
     actuator response deduced from it matches the model to within 0.3 %
     and 1.5 degrees up to 50 kHz.

To run one with Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/pyrpl_pkg.sv tb/tb_pyrpl_top.sv --top-module tb_pyrpl_top
./obj_dir/Vtb_pyrpl_top
```

All state that is read is reset, so the results do not depend on the
initial values of a two-state simulator.

## Departures and limits

* Filter corners are powers of two (shift registers), not arbitrary
  frequencies.
* The IIR latency is up to 2 x loops clocks. The published design quotes
  about 100 ns for its pipeline at 10 sections; this one needs up to
  160 ns.
* The register map, the bus handshake, the trigger encodings, the CORDIC's
  clamping of the fine angle and all fixed-point scalings are this
  design's choices. Host software written for the original PyRPL register
  map will not work unchanged.
* Address bits 31:24 are not decoded. The bus bridge in front is expected
  to select the block with them.
* Lint notes that remain on purpose: the package constants that a single
  module does not use; the low 16 bits of the noise generator, dropped
  because they are poorly random; and the undecoded address bits.
