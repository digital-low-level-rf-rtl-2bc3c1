# Digital LLRF for the ALS storage ring: SystemVerilog model

In the ALS storage ring two klystrons drive two normal-conducting 500 MHz cavities. A waveguide
switch can instead make one klystron drive both cavities, or send a klystron to a test load. The
low-level RF (LLRF) system holds the cavity field amplitude and phase at their set points. It also
removes the RF drive within microseconds when a power level or an arc detector reports a fault.

This design does both digitally:

- It samples 42 RF signals at an intermediate frequency with one clock locked to the master
  oscillator.
- It down-converts each signal to I/Q with a two-sample matrix method, which needs no 90° sampling
  relation.
- It sends all I/Q values through the FPGA as one serial "conveyor belt" stream.
- From that stream it runs the klystron amplitude and phase loops, the waveform recorders and a
  fast over-power interlock.

The system has three FPGA chassis:

- the **LLRF chassis**: cavity probes, the two klystron loops and the DAC drive;
- the **RF monitor chassis**: 28 monitor channels;
- the **fast interlock chassis**: RF permit from over-power and arc-detector faults.

`rtl/als_llrf_top.sv` wires the three together in one DSP clock domain. Every block has a
self-checking testbench in `tb/`. `tb/als_llrf_top_tb.sv` runs the whole system end to end, at its
default sizes, around a simple cavity model.

### Simulating

```
verilator --binary --timing -Wno-fatal -Irtl -y rtl rtl/llrf_pkg.sv tb/als_llrf_top_tb.sv --top-module als_llrf_top_tb
obj_dir/Vals_llrf_top_tb
```

The package goes first and `-y rtl` finds the modules. Use the same command with another testbench
and its `--top-module` for a single block. Every testbench ends by printing
`TB_RESULT checks=N failures=M`.

## Frequency plan and number formats

| quantity | value | origin |
|---|---|---|
| master oscillator f_MO | 499.64 MHz | paper |
| LO f_LO | 11/12 f_MO | paper |
| IF f_IF | f_MO/12 ≈ 41.6 MHz | paper |
| DSP clock = fast ADC rate f_S1 | f_LO/2 ≈ 229 MHz | paper |
| slow ADC rate f_S2 | f_S1/2 | paper |
| IF phase advance per DSP clock | 2/11 turn | paper ("IF/CLK = 2/11") |
| IF phase advance per f_S2 sample | 4/11 turn | follows from the above |

Word formats, all in `rtl/llrf_pkg.sv`:

- ADC samples: 14-bit signed.
- DAC words: 16-bit signed.
- I/Q, amplitude and PI words: 18-bit signed (`iq_t`).
- Phases: 18-bit unsigned fractions of a turn (`phase_t`, 2^18 = 360°).
- Interlock thresholds: 37-bit unsigned numbers in the units of I² + Q².

The 18-bit widths are this design's choice; the paper gives no internal widths.

### The conveyor belt

All I/Q data move as one stream word per clock (`iq_stream_t`). Each word carries:

- `valid`;
- `first`, marking slot 0 of a frame;
- `slot`, the slot number;
- `mode`, the 4-bit RF drive-mode word;
- `data`, one 18-bit value.

A frame of N channels is 2N slots long, in the order I1, I2, …, IN, Q1, …, QN, as the paper prints
it. Frames follow back to back. The LLRF chassis sends 28-slot frames (8.2 MHz frame rate) and the
RF monitor chassis 56-slot frames. The same stream feeds the feedback loops, the CIC filter and
waveform memory, and the link to the interlock.

## Blocks (rtl/)

| file | what it does |
|---|---|
| `llrf_pkg.sv` | widths, channel counts, stream word, feedback configuration record, waveform-memory control and status records |
| `cordic.sv` | pipelined CORDIC, rotate or vector selected per sample, gain K = 1.6468 left in the result; latency STAGES+1 = 17 clocks |
| `dds_lo.sv` | digital LO: exact modulo-11 phase counter stepping 2/11 turn per clock, with cos/sin (amplitude 2^16) from a CORDIC |
| `ddc.sv` | down-conversion of one channel with the paper's 2×2 inverse-matrix equations, from two consecutive samples; 1/sin θ constant for θ = 2/11 (fast) or 4/11 (slow) turn; output = 16 × ADC units; latency 3 clocks |
| `framing.sv` | snapshot of all channels' I/Q at the start of each frame, serialised onto the conveyor belt |
| `cic_conveyor.sv` | second-order decimating CIC with a separate integrator/comb state per slot; decimation (in frames) and output shift set at run time |
| `wave_buffer.sv` | 64k-word circular memory in two 32k banks; an RF permit drop or host trigger freezes the bank after 16k more words; trigger time stamp, cause and pointer kept; a per-slot skip mask selects which channels are recorded; the host reads and releases the bank (ack) |
| `pi_ctrl.sv` | C(z) = Kp + Ki/(1−z⁻¹) with feed-forward into the integrator and configurable saturation of the integrator and the output; optional modulo-one-turn error for phase |
| `feedback_ctrl.sv` | one klystron's loops (see below) |
| `power_interlock.sv` | per channel I² + Q² against a threshold, with an enable; latched trip bits; first-fault channel (helper of `fast_interlock`) |
| `fast_interlock.sv` | two power interlocks (14 and 28 channels), 16 arc + 16 arc-power inputs with a Config mask, latched; RF permit = no trip |
| `monitor_bank.sv` | DDCs for N channels (the first N_FAST at f_S1, the rest at f_S2), framing, CIC, waveform memory |
| `llrf_chassis.sv` | DDS LO, 14-channel bank (2 fast probes + 12 monitors), two `feedback_ctrl`, link output |
| `rfmon_chassis.sv` | DDS LO, 28-channel bank at f_S2, link output |
| `interlock_chassis.sv` | `fast_interlock` plus a waveform memory on the received LLRF stream, frozen by its own permit |
| `als_llrf_top.sv` | the three chassis; links and permit distribution as ports |

### Feedback controller (per klystron)

`feedback_ctrl` runs these steps:

1. **Deframe.** Take the cavity-1 and cavity-2 probe I/Q from their slots (0/14 and 1/15).
2. **Vector.** A time-shared CORDIC turns each probe into amplitude and phase.
3. **Select the amplitude.** The loop regulates cavity 1, cavity 2, or the weighted average
   (w1·A1 + w2·A2)/2^16. The average is the "one klystron drives two cavities" mode. The phase loop
   follows one chosen cavity.
4. **Update the PI loops.** The two `pi_ctrl` loops update every 4 clocks (T = 4/f_clk, as in the
   paper).
5. **Clip and up-convert.** Clip X (amplitude loop) and Y (phase loop), then rotate with the
   measured phase + phase offset − LO phase.
6. **Write the DAC.** DAC = rotated X/8, saturated to 16 bits, and zero while RF permit is low.

Sign convention:

- The DDC equations define I/Q through y = I cos(nθ) + Q sin(nθ). A physical phase ψ is therefore
  measured as −ψ.
- The drive is built in the same convention, as Re{(X − jY)·e^{j(LO − φ − offset)}}.
- So a positive Y advances the measured phase, and the measured phase plus a calibrated offset
  cancels the loop delay.

While RF permit is low both PI loops are held cleared. When permit returns the drive ramps up from
zero instead of jumping to a wound-up integrator value.

Timing:

- A new amplitude/phase is ready 18 clocks after the probe's Q slot.
- The DAC word follows the LO phase input by 19 clocks.

## Top-level ports (`als_llrf_top`)

- **ADCs.** `adc_llrf[14]`, `adc_rfmon[28]`: parallel 14-bit samples. Channels 0 and 1 of the LLRF
  chassis are the cavity probes. `llrf_s2_stb` and `rfmon_s2_stb` mark the f_S2 sample instants.
- **DACs.** `dac[2]`: klystron drive words, one IF sample per clock.
- **Host registers.**
  - `rf_mode`: the mode word carried on the streams.
  - `kly_cfg[2]` (`fb_cfg_t`): source selection, weights, set points, gains, feed-forward,
    saturation, phase offset, clip.
  - CIC decimation and shift per chassis.
  - Waveform-memory control and status per memory.
  - Loop monitors: `amp_meas`, `ph_meas`, `loop_railed`.
- **Links.** `llrf_link_tx` and `rfmon_link_tx` leave the chassis. `ilk_llrf_rx` and `ilk_rfmon_rx`
  enter the interlock. `llrf_permit` and `rfmon_permit` are the distributed RF permit. Connect them
  outside, with whatever link delay applies.
- **Interlock (PLC and Field IO side).**
  - Inputs: `rst_trip`, thresholds `thr_a`/`thr_b`, enables `en_a`/`en_b`, `arc_ok`, `arc_pwr_ok`,
    `cfg_arc_mask`.
  - Outputs: trip bits `trip_a`, `trip_b`, `arc_trip`; received mode words; `rf_permit`.

Everything is reset synchronously by `rst` (active high). Reset values:

- RF permit starts low and rises one clock after reset if nothing is tripped.
- The DACs start at 0.

## Verification (tb/)

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `cordic_tb` | random rotations and vectorings against real trigonometry (±8 LSB); latency via the tag |
| `dds_lo_tb` | phase steps of exactly 2/11 turn; cos/sin within 4 LSB |
| `ddc_tb` | fast and slow DDC on random amplitudes and phases: I = 16A cos ψ, Q = −16A sin ψ; 3-clock latency |
| `framing_tb` | slot order, snapshot per frame, first/valid/mode |
| `cic_conveyor_tb` | every output word against a direct-form second-order CIC, for R = 4 and R = 2 |
| `wave_buffer_tb` | permit-drop and host triggers, post-trigger length, bank switching, ack, time stamp and pointer, read-back data |
| `pi_ctrl_tb` | every update against a 64-bit model (normal and wrapped error), saturation, hold between updates, small-error integration |
| `feedback_ctrl_tb` | amplitude/phase for each source selection, 4-clock update period, saturation, DAC waveform against a model, clip, permit gating and loop clearing |
| `fast_interlock_tb` | reported powers, trip bits and their 3-clock latency, rst_trip, masked and unmasked arcs (2-clock latency) |
| `monitor_bank_tb` | \|I+jQ\| per channel on the belt, CIC pass-through and decimation by 2, fault freeze and read-back of the frozen bank |
| `als_llrf_top_tb` | end to end at the default sizes (below) |

`als_llrf_top_tb` is the full-size test. It closes the loop through a cavity model. The model is written as a two-pole
resonator tuned to the IF. It is run with its pole radius at 0, so the probe is the drive, delayed
5 clocks and scaled. With a cavity filling time of several clocks, the simple phase-offset
calibration in the testbench settles too slowly, and the phase gains would need retuning. It adds a 32-clock link delay. It then runs these phases in
order:

1. **Saturation.** The amplitude loops start with a saturation limit below what the set point needs
   (they rail).
2. **Regulation.** After the limit is raised they must settle within 1 % of the set point. A
   phase-offset calibration follows, then the phase loop must pull the phase to a set point 30°
   away.
3. **Mode switch.** Klystron 2 drives both cavities and regulates their 50/50 average. The
   measured cavity ratio must match the model.
4. **Trip.** One RF monitor channel doubles its amplitude. Only its trip bit may set. RF permit must
   fall within 4 µs; it measures 122 clocks = 0.53 µs, including the 32-clock link model. The drive
   must stop.
5. **Capture.** All three waveform memories must freeze with the fault flag. The LLRF record must
   show the probe before the trip and none at its end.
6. **Recovery.** After `rst_trip` the permit and the regulation return.
7. **Arc.** A masked arc input is ignored. An unmasked one trips, and `rst_trip` clears it.

Each mechanism is counted, and any that never happened is a failure. The run takes about 0.3 s of
CPU time under Verilator.

Every block's testbench was also run against a copy of the block with one deliberate bug, and each
copy was caught.

## What follows the paper and what is this design's own

**From the paper:**

- the frequency plan and the 2/11 IF;
- the non-IQ DDC equations;
- the CORDIC-based LO and Cart2Polar/Cart2Cart conversions;
- framing as I1..IN, Q1..QN;
- the run-time decimating second-order CIC on the serial stream;
- 64k circular memories with fault capture, double buffering and channel selection;
- the PI controller with feed-forward and saturation, updated every 4 clocks;
- amplitude from one cavity or a weighted average of two, phase from one cavity;
- the phase offset and the clip;
- drive gating by RF permit;
- 14 + 28 channels and 16 + 16 arc inputs ANDed with a Config mask into RF permit;
- the interlock latency requirement (< 4 µs).

**Choices of this design, where the paper is silent:**

- word widths and gain scalings;
- CORDIC internals (16 stages, 4 guard bits);
- the slot positions of the cavity probes;
- snapshot framing;
- CIC decimation counted in frames;
- the waveform-memory bank split (2 × 32k) and post-trigger length (16k);
- the waveform statistics kept (time stamp, cause, pointer);
- over-power as the trip condition, with latched trips and a reset;
- the drive sign convention;
- clearing the loops while permit is low;
- one clock domain for all three chassis. In the hardware the interlock chassis has its own
  reference clock, within ±100 ppm of the DSP clock, and the links cross between the two. The
  links are not modelled, so neither is the crossing.

**Not built:**

- **Analog and bought-in parts.** These are the analog front end, the SSB LO generator, the
  ADC/DAC/clock chips and their LVDS PHYs, the Aurora/GTX links, the gigabit Ethernet interface,
  the soft CPU with its peripherals and the PLC. The event-timing receiver and the Field IO FPGA's
  serial link are also left out. Where they connect, the top has plain ports.
- **Underspecified processing.** The FIR filter in the feedback path has no taps, response or even
  a consistent position given. The "Linearize" and "Interpolate" steps are only named. The published firmware drawing
  draws an "SPR" box and a low-pass on the proportional path without describing them. Only the
  clip and the plain PI controller are built.

**Lint:** Verilator's remaining warnings are unused outputs of shared sub-blocks (CORDIC angle/tag
outputs, DDC strobes, per-channel power words, stream bits a block does not need). Each module's
header notes them.

## Sizes

All defaults are the paper's sizes:

- 14 LLRF and 28 RF monitor channels;
- 16 + 16 arc inputs;
- 65536-word waveform memories;
- a loop period of 4 clocks.

The end-to-end testbench uses these defaults unchanged.
