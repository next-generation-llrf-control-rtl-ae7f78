# Pulsed LLRF controller for a C-band accelerating structure: fabric logic

A pulsed linear accelerator needs the RF field in its accelerating structure held at a set
amplitude and phase from pulse to pulse. The low-level RF (LLRF) controller does this. It
makes the drive pulse for the klystron and records the RF signals that come back. It then
corrects the drive of the next pulse from what it measured on the flat top of the last one.

This controller sits on one RFSoC device. The RF data converters sample the 5.712 GHz
signals directly, with no analog mixers. The converter tile's digital mixers and filters
then give complex baseband I/Q at 245.76 MS/s. The generation path runs the same way in
reverse. Everything between those two baseband streams runs in the programmable fabric,
and that part is given here as SystemVerilog:

- the pulse waveform memory and its modulator;
- the trigger logic;
- capture memory for every input;
- a pulse-to-pulse amplitude/phase feedback controller;
- the register file that the processor reaches over AXI4-Lite.

The converters, the converter tile's mixers and rate changers, the processor software, the
trigger board and the analog front end are not part of the RTL. The converter tile appears
as the `adc_iq` / `dac_iq` ports.

## Signal path and rates

| Quantity | Value |
|---|---|
| RF frequency | 5712 MHz |
| ADC sample rate | 2.4576 GS/s; 5712 MHz folds to 796.8 MHz, where the tile's NCO mixes it to 0 Hz |
| Decimation | 10x, giving 245.76 MS/s baseband |
| Fabric clock | 245.76 MHz, one I/Q pair per channel per clock |
| DAC sample rate | 5.89824 GS/s (24x interpolation of the baseband stream) |
| Inputs (default) | 3: klystron forward, cavity forward, reflected |
| Outputs | 1 drive (to the solid-state amplifier, then the klystron) |

All fabric logic runs on a single clock. `rst_n` is synchronous and active low.

A 1 µs pulse is 246 samples. A 60 Hz repetition rate is 4,096,000 clocks.

## Blocks

```
                 +-----------+   fb_cfg, period, pulse_len     +---------------+
 s_axil_cfg ---->| axil_slave|--> llrf_regs ------------------->| trigger_ctrl  |<-- ext_trig
                 +-----------+      ^   ^ capture read         +---------------+--> trig_out
                                    |   |                            | trig
                         status ----+   +--- capture_buf <-----------+----- adc_iq[0..2]
                                                                     |         |
                                                feedback_ctrl <------+---------+
                                                     | drive I/Q     |
 s_axil_wave --> axil_slave --> pulse_bram ---> pulse_mod <----------+
                                                     |
                                                     +--> dac_iq, rf_on
```

| File | Role |
|---|---|
| `rtl/llrf_pkg.sv` | I/Q, AXI4-Lite and configuration types; register map |
| `rtl/axil_slave.sv` | AXI4-Lite slave front end giving a simple register bus (one-clock read latency) |
| `rtl/llrf_regs.sv` | loop parameters, trigger and pulse settings, status, capture read-out window |
| `rtl/pulse_bram.sv` | dual-port waveform memory: processor port and playback port |
| `rtl/trigger_ctrl.sv` | external TTL trigger (synchronised, edge detected) or internal master trigger; soft trigger; trigger outputs |
| `rtl/pulse_mod.sv` | plays the waveform and multiplies it by the drive I/Q |
| `rtl/capture_buf.sv` | records all inputs for 1024 samples after each trigger |
| `rtl/cordic.sv` | iterative CORDIC: I/Q to amplitude/phase and back |
| `rtl/feedback_ctrl.sv` | flat-top averaging and pulse-to-pulse amplitude/phase correction |
| `rtl/llrf_top.sv` | wires it all together |

## What happens on a trigger

Time 0 below is the clock in which the internal one-clock `trig` pulse is high. An external
TTL edge produces `trig` 3 clocks after it arrives, through a two-flop synchroniser and an
edge detector.

1. **Drive generation.** `pulse_mod` samples the current drive I/Q and holds it for the whole
   pulse. It then reads waveform samples 0 to `pulse_len-1` from the BRAM. The first product
   reaches `dac_iq` at clock 3, and `rf_on` is high for exactly `pulse_len` clocks. Outside
   the pulse `dac_iq` is zero. The product is a full complex multiplication, so the drive
   scales and rotates the stored shape:

       out = round(w * d / 2^15), saturated to 16 bits

   A drive of (32767, 0) passes the waveform unchanged.
2. **Capture.** `capture_buf` writes all inputs side by side, starting with the sample
   present at clock 1. It then sets `done` and tags the capture with the pulse number. A new
   trigger starts a new capture, even while one is running, so the processor reads each
   pulse out before the next one arrives (16.7 ms apart at 60 Hz).
3. **Measurement.** `feedback_ctrl` sums the input selected by `CTRL[7:4]` over
   2^`WIN_LOG2` samples. The first summed sample is the one present at clock `WIN_START+2`,
   which is the same sample as capture index `WIN_START+1`. The average goes through the
   CORDIC in vectoring mode. This gives the measured amplitude and phase (`MEAS` register).
4. **Correction** (loop closed, `CTRL[0] = 1`). The controller applies an integral step for
   each loop:

       drive_amp   <- clamp(drive_amp   + AMP_GAIN * (AMP_SET - meas_amp)  / 256, AMP_LO, AMP_HI)
       drive_phase <- clamp(drive_phase + PH_GAIN  * wrap(PH_SET - meas_phase) / 256, PH_LO, PH_HI)

   The gains are unsigned Q8.8. The phase error wraps modulo 360°, and the phase limits are
   signed. The CORDIC in rotation mode then turns the new polar drive back into I/Q. The
   update is complete about 41 clocks after the window ends, long before the next pulse.
   The clamp flags and an update counter go to `FB_STAT`.
5. **Open loop** (`CTRL[0] = 0`). The drive follows `FF_AMP` / `FF_PHASE` directly. It
   updates whenever they differ from the current drive, with no trigger needed.

A loop converges when gain × plant gain stays below 2 in amplitude. In phase, the gain
alone sets the rate. The plant phase shift drops out because the loop works in polar
form.

## Number formats

| Quantity | Format |
|---|---|
| Input and output samples | signed 16-bit I and Q; in a 32-bit word, I is bits 15:0 and Q is bits 31:16 |
| Drive I/Q | Q1.15 (32767 ≈ 1.0) |
| Drive amplitude (`FF_AMP`, limits, `DRIVE[15:0]`) | unsigned, 32767 ≈ unity |
| Measured amplitude | unsigned, in input-sample units |
| Phases | 16-bit binary angle, 65536 = 360°, read as signed (−180° … +180°) |

The CORDIC runs 16 iterations with 3 guard bits and 4 extra angle bits. The testbenches hold it to
within 4 LSB in amplitude and 0.05° in phase.

## Register map (parameter link)

Byte addresses. Registers are 32 bits wide, and writes honour the byte strobes.

| Addr | Name | Access | Contents (reset value) |
|---|---|---|---|
| 0x00 | ID | RO | 0x4C4C5246 |
| 0x04 | CTRL | RW | [0] loop closed, [1] master trigger, [2] soft trigger (write 1, self-clearing), [7:4] feedback input (0) |
| 0x08 | PERIOD | RW | master trigger period in clocks (4,096,000 = 60 Hz) |
| 0x0C | PULSE_LEN | RW | pulse length in samples (246 = 1 µs) |
| 0x10 | WIN_START | RW | flat-top window start (128) |
| 0x14 | WIN_LOG2 | RW | log2 of the window length, 0–15 (6) |
| 0x18/1C/20/24 | AMP_SET / AMP_GAIN / AMP_HI / AMP_LO | RW | amplitude loop (0 / 128 / 32767 / 0) |
| 0x28/2C/30/34 | PH_SET / PH_GAIN / PH_HI / PH_LO | RW | phase loop (0 / 128 / +180° / −180°) |
| 0x38/3C | FF_AMP / FF_PHASE | RW | open-loop drive (0 / 0) |
| 0x40 | PULSES | RO | triggers seen |
| 0x44 | MEAS | RO | {phase, amplitude} of the last flat top |
| 0x48 | DRIVE | RO | {phase, amplitude} of the present drive |
| 0x4C | CAP_STAT | RO | [31] capture done, [30:0] pulse number |
| 0x50 | FB_STAT | RO | [31:16] closed-loop updates, [1] phase clamped, [0] amplitude clamped |
| 0x10000 + 4·(c·1024 + n) | capture | RO | sample n of input c, {Q, I} |

On the waveform link, sample n is at byte address 4·n and is written as {Q, I}.

## How closely this follows the original design

**Follows the published design:**

- the split into these blocks and the data flow between them;
- the use of AXI4-Lite for both parameters and waveform;
- the sample rates and the decimation;
- external TTL triggering, plus the option to be the master trigger source with several
  trigger outputs;
- capture of all inputs on every pulse;
- modulation of the stored baseband pulse with the drive I/Q computed by the feedback;
- the parameter set of the feedback (for amplitude and for phase: a set value, a
  correction gain, an upper limit and a lower limit);
- 1 µs pulses at 60 Hz as the reset configuration;
- three inputs, as on the built prototype.

**Choices made here:**

- The feedback algorithm. The original was still in development and is not described. The
  controller here is the simplest that uses the listed parameters: flat-top average,
  polar conversion, clamped integral step between pulses.
- All number formats and the register map.
- Memory depths of 1024 samples.
- The open-loop drive registers, the soft trigger and the window registers.
- The trigger synchroniser and output width (64 clocks).
- The restart rules.
- Single-channel output. Up to 16 inputs are possible through `NUM_ADC`.

The NCO frequency printed in the original block diagram (798.6 MHz) does not match the
alias of 5712 MHz at 2.4576 GS/s, which is 796.8 MHz. The tile setting lies outside this
RTL in any case.

**Not included:**

- the converters and the tile's mixers, decimators and interpolators (vendor hard blocks);
- intra-pulse (fast) feedback;
- more than one output channel;
- clock-domain crossings (everything runs on the converter-tile clock).

## Verification

Each block has a self-checking testbench in `tb/`, named `tb_<module>`. Each one compares
the block against values computed independently in the testbench. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

- `tb_axil_slave`: all handshake orders and back-pressure, with a register model.
- `tb_llrf_regs`: every register, byte strobes, reset values, the soft-trigger pulse and
  capture address decoding.
- `tb_pulse_bram`: random traffic on both ports against a reference array.
- `tb_trigger_ctrl`: asynchronous external edges (latency 3–4 clocks), exact master
  period, soft trigger, output width and counting.
- `tb_capture_buf`: sample-exact alignment, done timing (DEPTH+1 clocks), restart and
  tagging.
- `tb_pulse_mod`: every sample against a double-precision complex product, latency, drive
  hold and saturation.
- `tb_feedback_ctrl`: measurement accuracy through a complex plant; convergence of
  amplitude and phase; all four limits.
- `tb_llrf_top`: the whole design at its default parameters.
  - It drives a baseband model of klystron, cavity and reflection, all over AXI4-Lite.
  - It runs open-loop pulses and checks every DAC sample.
  - It reads back the full capture of all inputs.
  - It closes the loop under the master trigger and checks that the cavity settles at the
    set point.
  - It checks the amplitude limit and a soft trigger.
  - It measures the 60 Hz master period.
  - It counts each of these mechanisms and fails if one never occurred.
- `tb_cordic`: the CORDIC helper in both directions against sqrt, atan2, cos and sin;
  latency of ITER+3 clocks; saturation above full scale.
- `tb_llrf_workloads`: the measurement campaigns of the prototype, on the whole design at
  its default parameters.
  - Amplitude sweep: 1 µs pulses at 60 Hz, with the pulse amplitude stepped from 2000 to
    10000. The SSA model has an amplitude-dependent phase.
    - Every DAC sample is checked.
    - The flat-top measurement is checked.
    - A 200-sample DFT of the captured flat top must show a single tone.
  - 60 consecutive pulses, each read out before the next one.
    - The trigger period is shortened to 40,960 clocks through the `PERIOD` register.
    - The spread of the 60 flat-top averages must match the jitter the model applied.
  - Accelerating-structure model with three inputs (klystron forward, cavity forward,
    reflection):
    - 450 ns pulses on the external trigger at 60 Hz spacing;
    - 1 µs pulses on the 10 Hz master trigger (24,576,000 clocks);
    - every capture of all three inputs is checked in full.

Running a test with plain Verilator:

    verilator --binary --timing --assert -y rtl rtl/llrf_pkg.sv tb/tb_llrf_top.sv \
        --top-module tb_llrf_top -o sim && obj_dir/sim

(`-y rtl` lets Verilator find each module in the file of its name; the package is given
first because the modules import it.) Any other testbench runs the same way.

Verilator's two-state simulation starts un-reset variables at random values. The
testbenches do not depend on them. The end-to-end test takes about 10 s, including the
4,096,000-clock period measurement. The workload test takes about 70 s: it simulates about
76 million clocks, most of them waiting between triggers at 60 Hz and 10 Hz.
