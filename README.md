# Walsh-function controller for physical-layer qubit control

Qubit control at the lowest layer needs precisely timed pulse patterns
(dynamical decoupling), modulation envelopes for gates that suppress noise,
and fast processing of sensor readouts. A large class of these protocols can
be written exactly as Walsh functions: two-valued, piecewise-constant
functions whose segments are all the same length. A Walsh function is the
XOR of a few square waves (Rademacher functions), which makes it cheap to
generate in digital logic, in real time, from a handful of programming bits
(an order number, a segment length, a repeat count, a few weights) instead
of from a stored waveform.

This repository holds synthesizable SystemVerilog for such a controller,
following the FPGA design published by Ball, Nguyen, Leong and Biercuk
("A functional basis for efficient physical-layer classical control in
quantum processors"). It has two independent parts:

* an **output stage** that plays a Walsh timing pattern, fires a trigger at
  each of its transitions, and on every trigger streams a Walsh-synthesized
  modulation envelope as I/Q words for a two-channel DAC (AM, phase
  modulation or QAM);
* a **signal-reconstruction (SID) datapath** that converts fidelities
  measured on N Walsh-modulated sensor qubits into Walsh coefficients and
  streams the reconstructed signal.

The RTL is not the authors' code. Where the publication gives the structure
of a block it is followed; where it gives only the function, the simplest
circuit that performs it is used. Each file header says which is which, and
the section *Departures and open points* lists every place where a choice
had to be made.

## Walsh functions in hardware

Time is divided into 2^m equal segments, numbered i = 0 .. 2^m-1. The
Rademacher function R_j is bit (m-1-j) of i: R_0 is 0 in the first half and
1 in the second, R_1 switches every quarter, and so on. The Walsh function of
Paley order l = (b_{m-1} .. b_0) is

    Wbar_l(i) = XOR over j of  b_j AND R_j(i)          (Wbar_0 = 0)
    W_l(i)    = Wbar_l(i) XOR 1                         (W_0    = 1)

Example: l = 12 = 0b1100 gives Wbar_12 = R_2 XOR R_3. Wbar_l starts at 0, so
its first transition comes after t = 0 and can serve as a trigger; this form
is used for timing. W_l has a constant "1" member and is used for synthesis,
where W_l = 1 is read as +1 and W_l = 0 as -1.

* `rademacher_gen` holds a segment counter (counts `clk_expand` cycles) and an
  (M+1)-bit segment index. R_j are index bits, the extra index bit is set when
  the sequence is complete, and `last` flags the final clock cycle so the
  sequence can be restarted without a gap. The segment count 2^m is a run-time
  input.
* `walsh_gen` is a cascade of M identical cells. Cell j passes its input
  through when b_j = 0 and XORs in R_j when b_j = 1 (an XOR gate feeding a 2:1
  multiplexer). The first cell's input selects Wbar (0) or W (1). The order
  sits in a register; the Rademacher-to-output path is purely combinational.

## Output stage: timing, modulation, synthesis

```
          clk domain                   clk_b domain (inverted clock)
 start ─► timing_sequencer ─trigger─► walsh_mod_gen ─W*[N], data_valid─► walsh_filter_synth ─► I, Q (14 b)
 s,t1,R   Rademacher+Walsh gen         Rademacher gen + N Walsh gens       AM / PhiM / QAM arbitrators
          Repeat module, Edge detect   (orders 0..N-1, W form)             mode mux + output DFFs
```

**Timing sequencer** (`timing_sequencer`, clock `clk`). Programmed with the
Paley order `s` (8 bits), the segment length `t1` (8 bits, in clock cycles)
and the repeat count `R` (4 bits). On the rising edge of `start` it captures
the three values and plays Wbar_s with 2^m(s) segments, where m(s) is the bit
width of s, so one pass lasts t1 · 2^m(s) cycles. The `repeat_module` counts
passes: its counter starts at 1 and the output is enabled while
counter ≤ R, so the pattern plays R times back to back, and R = 0 produces
nothing. An edge detector (one flip-flop for the previous value, one for the
result) turns every transition of the timing function, rising or falling,
into a one-cycle `trigger` pulse, one cycle after the transition. For
dynamical decoupling each trigger marks a control-pulse position.

**Modulation generator** (`walsh_mod_gen`, N channels, default N = 8). Each
trigger starts a burst of the first N Walsh functions W_0 .. W_{N-1} in
parallel: one shared Rademacher generator feeds N Walsh generators with the
constant orders 0 .. N-1. A burst has 2^clog2(N) segments of `t2` cycles
(t2 is 4 bits). `data_valid` is high during the burst; outside it every
output is 0. The trigger goes through one flip-flop with rising-edge
detection before starting the burst, and a trigger during a burst restarts
it.

**Filter synthesizer** (`walsh_filter_synth`). The weights X_k are 14-bit two's
complement numbers. `sum_weights` selects +X_k where W_k = 1 and -X_k where
W_k = 0 (invert and add one) and adds the N terms into a 14 + clog2(N) bit
sum (17 bits for N = 8). Three arbitrators use that sum:

| mode (2 bits) | I | Q | pipeline after W* |
|---|---|---|---|
| `00` AM  | Σ¹ = sum saturated to 14 bits | 0 | 2 cycles |
| `01` ΦM  | cos(Σ²) | sin(Σ²) | 2 cycles |
| `11` QAM | Σ¹·cos(Σ²) | Σ¹·sin(Σ²) | 4 cycles |
| `10` | 0 | 0 | — |

In ΦM the sum is a phase: its low 13 bits index a sine table (`dds_sincos`,
full turn = 2^13, outputs 14-bit two's complement with amplitude 8191), read
in one cycle; cos is read a quarter turn ahead. The AM path has one register
after saturation so that Σ¹ and the sine/cosine values arrive together. The
QAM arbitrator multiplies only the 7 most significant bits of each 14-bit
operand (7 × 7 → 14 bits) in two pipeline stages. The output flip-flops load
the selected value while the (delayed) data-valid flag is high and load 0
otherwise, so I and Q rest at 0 between bursts.

### Clocking and the 4.5-cycle latency

The output stage uses two clocks of equal frequency from a PLL outside the
design: `clk` for the timing sequencer, and `clk_b`, its complement, for the
modulation generator and the synthesizer. A trigger launched on a `clk` edge
is therefore captured by the next stage half a cycle later instead of a full
cycle later. Counting from the `clk` edge at which the timing function
flips:

| stage | cycles | running total |
|---|---|---|
| edge detector → `trigger` | 1 | 1 |
| half-cycle hand-over to `clk_b`, trigger flip-flop, burst start → W* | 1.5 | 2.5 |
| sum + saturation / sine table register, output flip-flop → I, Q | 2 | 4.5 |

QAM adds 2 cycles (6.5). These numbers are measured in simulation by
`tb_walsh_controller` and `tb_walsh_top`. Note that the half cycle gained is
only real because the synthesizer runs on `clk_b`; moving the modulation
generator alone to `clk` would not change the end-to-end latency.

The reset `rst` is synchronous and active high in both domains. With a
100 MHz clock a segment is 10 ns · t1 (timing) or 10 ns · t2 (modulation).

## Signal reconstruction (SID)

Sensor k is a qubit whose dephasing is modulated by W_k during an acquisition
window of length T; its measured fidelity P_k gives the Walsh coefficient of
the sensed field b(t) through

    gamma·T·X_k = arcsin(2·P_k - 1),      b̂ = Σ_k X_k · W_k .

`walsh_sid` (default N = 32 sensors) implements this as a pipeline started by
`trigger`:

1. `weights_estimation`, one per sensor: P_k (13 bits, 0 .. 8191 standing for
   0 .. 1) is sampled into a register shifted left by one (2P_k), the value
   "1" = 8191 is subtracted, and the result P* ∈ [-8191, 8191] addresses a
   2^14-entry arcsine table. The table holds
   round(asin(P*/8191) · 2047 / (π/2)), a 12-bit signed angle where ±2047 is
   ±π/2. Two cycles.
2. The weights-valid flag starts a `walsh_mod_gen` with N channels
   (2^clog2(N) segments of `t2` cycles): two cycles.
3. `sum_weights` adds ±(gamma·T·X_k); the sum (17 bits for N = 32) is
   saturated to 14 bits.
4. `sid_divider` divides by the 14-bit `d` = gamma·T (truncating; d = 0 gives
   0) into the 14-bit `b_hat`, registered: one cycle.

The first reconstructed sample appears 5 cycles after the trigger, and one
sample per segment follows; `valid` marks them. The SID runs on `clk`.

## Top level

`walsh_top` contains `walsh_controller` (the output stage) and `walsh_sid`.
Its ports are plain signals and arrays: the two PLL clocks, reset, the
controller programming inputs (`start`, `repeats`, `t1`, `s`, `t2`,
`weights[N_CTRL]`, `mode`), the DAC words `i_dac`/`q_dac`, diagnostic copies
of the timing function, its Rademacher functions (`rademacher`), the
trigger, W* and data valid, and the SID inputs
(`sid_trigger`, `sid_p[N_SID]`, `sid_d`, `sid_t2`) and outputs (`b_hat`,
`b_valid`). The PLL, the DAC, the sensor qubits and the processor that writes
the programming inputs are outside the design.

Shared widths and the mode encoding are in `rtl/walsh_pkg.sv`.

| parameter | default | meaning |
|---|---|---|
| `walsh_top.N_CTRL` | 8 | Walsh channels of the output stage (the published resource figures are for 8) |
| `walsh_top.N_SID` | 32 | sensors / Walsh channels of the SID (16 and 32 were demonstrated) |
| `ORDER_W`, `T1_W`, `T2_W`, `REP_W` | 8, 8, 4, 4 | widths of s, t1, t2, R |
| `XW`, `DAC_W` | 14, 14 | weight and I/Q widths |
| `PHASE_W`, `QAM_OPW` | 13, 7 | sine-table address, multiplier operand width |
| `P_W`, `GTX_W`, `DIV_W` | 13, 12, 14 | fidelity, arcsine output, divider widths |

## Departures and open points

Points the publication leaves open, and how they are resolved here:

* **Segment count of the modulation burst.** The text states a span of
  2^m(n) segments with m(n) the bit width of n, the number of functions, while
  the reconstruction plots show 16 segments for 16 functions and 32 for 32.
  The RTL follows the plots: 2^clog2(N) segments.
* **Sum width.** The text gives 14 + log2(n) bits (17 for 8 channels), one
  drawing 16. The RTL uses 14 + clog2(N).
* **Weight encoding.** Described as one sign bit plus amplitude; the drawing of
  the ±X_k selector negates by invert-plus-one. Two's complement is used.
* **Overflow.** "Checked against an overflow value" is implemented as
  saturation to 14 bits.
* **Phase scaling.** The 13 low bits of the sum are the phase (2π = 8192).
* **Sine table.** The original uses the FPGA vendor's DDS core; here a ROM of
  round(8191·sin(2πp/8192)) is filled at elaboration.
* **Arcsine table scaling** (±2047 = ±π/2) and "1" = 8191 are this design's
  choices.
* **Divider position.** One description places a divider after each arcsine
  table, the block diagram a single divider after the sum. The RTL has the
  single divider; for exact arithmetic both give the same result, with
  integer truncation they can differ by rounding.
* **Start and trigger.** `start` acts on its rising edge; the first trigger is
  the first transition of Wbar_s, not the start itself. The published timing
  diagram draws "start" directly before "Trigger"; here the one-cycle
  sequencer delay is measured from a transition of the timing function.
* **Idle outputs.** W* and I/Q are forced to 0 outside a burst; mode `10`
  outputs 0.
* **Programming latency.** The publication quotes 2 cycles from a change of
  inputs to ready, and 3 cycles from reset to ready. Here the weights are not
  captured: a weight change reaches I/Q two `clk_b` cycles later
  (`tb_walsh_filter_synth` changes weights in the middle of a stream). The
  timing inputs are captured at `start`/trigger. `tb_walsh_top` resets the
  chip in the middle of a burst and finds it idle, with outputs at 0, two
  cycles after reset is released; a new start is then accepted at once.
* **Resource figures** (LUT and block-RAM percentages on a Zynq-7010) and the
  quoted 345 programming bits are not reproduced; the controller's own inputs
  add up to 139 bits for 8 channels.
* The sine and arcsine ROMs are filled by `initial` blocks that evaluate
  `$sin` and `$asin` on constants, so the tables follow the formulas above
  instead of being stored as data files.
  Filling the tables this way is slow in some synthesis front ends. A single
  `weights_estimation` elaborates in under a minute, but the 32 arcsine
  tables of `walsh_sid` take tens of minutes there. Simulators are not
  affected.

## Verification

Every module has a self-checking testbench in `tb/` that compares against
models written from the definitions above (`tb/walsh_ref_pkg.sv`: Walsh
values from the XOR formula, saturation, rounded sine/arcsine) and prints
`TB_RESULT checks=<n> failures=<n>`. Each also has a watchdog. Highlights:

* `tb_timing_sequencer`: every cycle of Wbar_s for s ∈ {0, 1, 3, 12, 200,
  255}, t1 up to 255, R ∈ {0, 1, 2, 3, 15}; one trigger per transition.
* `tb_walsh_mod_gen`, `tb_walsh_filter_synth`: all channels and all modes,
  cycle by cycle, including the 2- and 4-cycle pipelines.
* `tb_walsh_controller`: the W_0 + W_3 AM filter on Wbar_3 repeated twice,
  plus ΦM and QAM bursts, with latency measured in half cycles.
* `tb_walsh_sid`: 16- and 32-sensor reconstructions, 5-cycle latency,
  saturation.
* `tb_sid_field`: the 32-sensor block at its default size recovers a smooth
  field from the fidelities the sensors would measure,
  P_k = (1 + sin(gamma*T*X_k))/2. The output is the field's average over each
  of the 32 segments, or over segment pairs when only the 16 lowest orders
  are measured. The worst error seen is about 5 LSB.
* `tb_walsh_top`: the whole chip at its default sizes; it counts rising and
  falling triggers, repeats, AM saturation, ΦM, QAM, R = 0, a reset in the
  middle of a burst and a SID run, and
  fails if any of them never happened. It runs in seconds.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/walsh_pkg.sv tb/walsh_ref_pkg.sv tb/tb_walsh_top.sv \
    --top-module tb_walsh_top -o sim
./obj_dir/sim
```

Replace `tb_walsh_top` with any other testbench name. Verilator finds the
remaining modules through `-Irtl` by file name (one module per file).
Parameters can be changed on the instance in a testbench (for example
`walsh_top #(.N_CTRL(16), .N_SID(16))`); the testbenches that exercise
widths other than the defaults show how.
