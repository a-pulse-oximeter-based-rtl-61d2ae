# Time-of-flight histogram engine for a SPAD pulse oximeter

A conventional pulse oximeter measures how much light gets through a finger.
That reading changes with source power, skin tone, ambient light and motion.
A time-of-flight oximeter looks at *when* photons arrive instead. A short laser
pulse enters the tissue. Photons take paths of different lengths, so they reach
the detector spread out in time. The shape of that spread is the temporal point
spread function (TPSF), and it depends on absorption and scattering. Its mean
time `<t>` does not change when the overall intensity changes.

This RTL is the FPGA half of such an instrument. A single-photon avalanche
diode (SPAD) gives one pulse per detected photon. The FPGA timestamps each
pulse with a tapped-delay-line time-to-digital converter (TDC). It builds one
37-bin histogram of arrival times per frame, 50 frames per second, and streams
each frame out for a DMA engine and a network link to a PC. It also makes the
4 MHz trigger for the laser. It follows the architecture of the prototype in
Hua et al., "A pulse oximeter based on Time-of-Flight histograms": a 448-tap
carry-chain TDC clocked at 600 MHz, 45 ps bins and 16-bit bin counters. Where
that description stops, the choices made here are listed in the last sections.

## Measuring photon time within one clock period

The TDC has no separate start pulse. Every rising edge of the 600 MHz clock
is a start, so its measurement range is one clock period, 1667 ps. The laser
trigger is divided down from the same clock: 150 clock periods make one
250 ns laser period. So every laser shot hits the same point of the clock
cycle, and a photon that spends `d` ps in the optics and tissue always arrives
at the same phase of the 600 MHz period. Histogramming that phase over many
shots rebuilds the TPSF. This works as long as the TPSF plus the instrument
response fits in 1667 ps. In the prototype the instrument response is 165 to
315 ps wide (full width at half maximum).

The window can be moved along the arrival-time axis. The TDC clock comes from
a clock manager (a Xilinx MMCM) with dynamic phase shift. Each phase step
delays the TDC clock, and not the laser trigger, by a fraction of a
nanosecond. The TPSF then appears earlier in the window. `phase_driver` makes
these steps on request from the PC.

```
 spad_stop ──► tdl_carry_chain ──448──► tdl_sampler ──448──► tdc_encoder ──8──► histogram_generator ──16──► m_axis_* (to DMA)
                 (delay line)           (2 flop ranks)       (event + bin)        ▲  (2 banks x 37 x 16 bit)
                                                                                  │
 cfg_* ◄──► phase_driver ──run, frame length──► frame_rate_control ──start/stop──┘
               │   └─ ps_en/ps_incdec/ps_done ◄──► clock manager (outside)
               └─ period/high/delay ──► sync_adjuster ──► sync_out (to laser)
 clk_tdl: everything except sync_adjuster          clk_sync: sync_adjuster
```

## The delay line and its sampling

The SPAD pulse enters a chain of 448 carry elements. Tap `k` goes high about
`(k+1) x 3.72 ps` after the pulse's rising edge. At each clock edge the
448 tap states are captured (`tdl_sampler`). A photon that came `t` ps before
the edge has turned on the first `t / 3.72` taps, so the captured word is a
thermometer code of the time left until the edge. A second register rank gives
a metastable first-rank bit a cycle to settle.

The delay line is physical, not logical. In an FPGA it is a placed chain of
carry primitives. `tdl_carry_chain` is therefore a behavioural model, not
synthesizable. It gives tap `k` a delay of `round((k+1) x 1667 / 448)` ps, so
the taps are evenly spread, with only 1 ps rounding. A real chain has uneven
taps. The prototype measured its code-density non-linearity at ±0.15 LSB
(differential) and -0.55 to +0.15 LSB (integral) over the 37 bins. For a
hardware build, replace the model with a placed carry chain that has the same
two ports.

## From taps to bins

`tdc_encoder` does three things:

1. **Event detection.** The SPAD pulse lasts several nanoseconds, so the line
   stays all-ones for several samples after a photon. A new event is the sample
   in which tap 0 is high and was low in the sample before. If a photon arrives
   in the last few picoseconds before an edge, tap 0 misses that edge. The
   photon is then seen one sample later with all 448 taps set, as an arrival at
   the very start of the next period, which is what it is.
2. **Counting taps.** The number of high taps `n` (1 to 448) is found by
   counting ones. Eight group counts are formed in the first stage and added in
   the second. Counting, rather than looking for the 1-to-0 edge, also
   tolerates bubbles in the code.
3. **Folding into bins.** The arrival time after the start edge is `448 - n`
   taps. The 448 taps are spread over 37 bins of equal average width,
   1667 ps / 37 = 45 ps:

   `code = floor((448 - n) x 37 / 448)`, limited to 36.

   Code 0 is an arrival just after the start edge and code 36 one just before
   the next edge. The output is 8 bits wide.

Latency is three clock cycles from the sample on `therm` to `code_valid`. It
can take one event every cycle. The SPAD recovery time (about 20 ns, 12 clock
cycles) keeps the real event rate far below that.

## Frames and the histogram banks

`frame_rate_control` counts frame lengths in clock cycles. The length register
resets to 12,000,000 cycles, which is 20 ms or 50 frames/s at 600 MHz. While
`run` is set, frames follow each other with no gap. `frame_start` marks the
first cycle of a frame and `frame_stop` the last. When `run` is cleared, the
frame in progress finishes and no new one starts. A new length takes effect at
the next frame.

`histogram_generator` keeps two banks of 37 counters of 16 bits each:

* **Counting.** Each valid code inside a frame increments one counter of the
  counting bank. Codes of 37 and above are ignored.
* **Bank swap.** In the last cycle of a frame the banks change roles. The
  finished bank is streamed out, one 16-bit word per bin, bin 0 first. Each
  word is cleared as it is accepted. No event is lost at the frame boundary.
* **Saturation.** A counter at 65,535 stays there. Every event lost this way
  adds one to `saturations`. At 4 MHz a 20 ms frame holds at most 80,000 shots,
  so only an extremely bright, narrow TPSF can saturate a bin.
* **Dropped frames.** If the previous frame is still being sent when a frame
  ends, the new frame is discarded whole and counted in `frames_dropped`. A
  slow consumer therefore loses frames but never receives a mixture of two.

The output follows the AXI4-Stream video convention that a Xilinx video DMA
expects. `m_axis_tuser` marks the first word of a frame and `m_axis_tlast` the
last. While `m_axis_tvalid` is high and `m_axis_tready` low, the data and flags
are held; an assertion checks this. The first word is offered in the cycle
after `frame_stop`. With `tready` high, a frame takes 37 cycles.

The PC computes intensity and mean time from each frame:

`W = sum_i I(i)`, `<t> = sum_i i x I(i) / W` (in bins of 45 ps).

The prototype does this in software. It is not in the RTL. The end-to-end
testbench computes it to check the hardware.

## Laser sync

`sync_adjuster` counts `period` cycles of its clock. Its output is high for
`high` cycles, shifted later by `delay` cycles. The reset values, 150 and 92,
give the prototype's laser input: 4 MHz at 61 % duty, high for 153.3 ns
(153 ns in the prototype). The low-cost laser driver shortens this pulse with
an RC delay and an AND gate to about 1.3 ns. That circuit is analog, on the
laser board, and not part of this RTL.

## Control registers

`phase_driver` holds the registers. Writes go through `cfg_we`, `cfg_addr` and
`cfg_wdata`, in the `clk_tdl` domain, and take effect at the next edge.
`cfg_rdata` reads `cfg_addr` combinationally.

| addr | name         | access | reset      | meaning |
|------|--------------|--------|------------|---------|
| 0    | CTRL         | rw     | 0          | bit 0: run (acquire frames) |
| 1    | PHASE        | rw     | 0          | signed target phase, in clock-manager fine steps |
| 2    | FRAME_CYCLES | rw     | 12,000,000 | frame length in clock cycles |
| 3    | SYNC_PERIOD  | rw     | 150        | laser period in clock cycles |
| 4    | SYNC_HIGH    | rw     | 92         | laser trigger high time in cycles |
| 5    | SYNC_DELAY   | rw     | 0          | trigger delay in whole cycles |
| 6    | STATUS       | r      | -          | [31:16] current phase, bit 0 phase shift busy |
| 7    | FRAMES       | r      | -          | frames sent |
| 8    | DROPPED      | r      | -          | frames dropped |

When PHASE differs from the current phase, the driver moves one step at a time.
For each step it pulses `ps_en` for one cycle, with `ps_incdec` high to move
later or low to move earlier. It then waits for `ps_done` before the next
step. This is the MMCM's PSEN/PSINCDEC/PSDONE handshake, with PSCLK =
`clk_tdl`. Assertions check that `ps_en` is a single-cycle pulse and that
`ps_done` only comes while a step is outstanding. The current phase resets to 0
with `rst_n`. The clock manager keeps its phase through that reset, so set
PHASE to 0 before resetting.

## Clocks and reset

* `clk_tdl` is the phase-shifted 600 MHz clock. The TDC, encoder, histogram
  generator, frame control and registers run on it.
* `clk_sync` is the unshifted 600 MHz clock. Only `sync_adjuster` runs on it.
  Its reset is `rst_n` passed through two flip-flops in that domain. Its three
  settings cross from `clk_tdl` without a handshake, so change them only while
  the laser output is not in use.
* All resets are synchronous and active low.
* Timing at 600 MHz is not yet closed. The encoder is pipelined for it, but
  the single-cycle read-modify-write of a histogram counter has not been
  shown to reach 600 MHz.

## What comes from the prototype and what is this design's own

Taken from the published prototype:

* the architecture of the processing unit: delay line, encoder, histogram
  generator with frame control, DMA path, sync generator, clock manager with
  dynamic phase shift, and a driver between the network and the clock manager;
* 448 taps, a 1667 ps range, a 600 MHz start clock, 37 bins of 45 ps average
  width, 16-bit bins and an 8-bit encoder output;
* 50 frames/s;
* a 4 MHz, 61 % duty (153 ns) laser trigger.

This design's own choices, where the published description gives no detail:

* the event rule, counting ones, and the bin formula in the encoder, with its
  3-cycle pipeline;
* the second flip-flop rank in the sampler;
* the two histogram banks, saturating counters, the whole-frame drop rule, and
  the stream format;
* what the sync adjuster can adjust (period, high time, whole-cycle delay);
* the register map and the step-by-step phase sequencer;
* the use of two clock-manager outputs, one shifted and one fixed.

Only the name of the driver block is published.

Departures and simplifications:

* The delay line is an evenly tapped model. A real carry chain needs
  calibration, for example a code-density table that maps taps to bins. This
  design has none: every tap is given the same width.
* The rounded high time is 92 cycles (153.3 ns) instead of 153 ns.
* The published design places frame control inside the histogram generator.
  Here it is a separate module, `frame_rate_control`, beside the histogram
  generator in the top level. It does the same job, and its markers are also
  brought out as ports.

## Parts outside this RTL

These parts are not in this RTL:

* the clock manager and the input clock buffer (vendor primitives);
* the video DMA and the gigabit Ethernet link (vendor IP and software);
* the SPAD sensor and its bias supply;
* both lasers and the pulse shortener;
* the SPAD control outputs, which the prototype names without describing;
* the mean-time calculation, which runs on the PC.

Their signals are ports of `tof_processor`. Two simulation models stand in for
some of them in `tb/`:

* `mmcm_model` is the clock manager: 15 ps steps, with `ps_done` 12 cycles
  after `ps_en`.
* `spad_laser_model` is the laser, tissue and SPAD. It gives a fixed flight
  time plus an exponential spread, a detection probability per shot, 20 ns of
  dead time and 5 ns pulses.

## Files

| file | what it is |
|------|------------|
| `rtl/tof_pkg.sv` | sizes, default settings, register map, settings struct |
| `rtl/tdl_carry_chain.sv` | delay-line model (behavioural) |
| `rtl/tdl_sampler.sv` | two flip-flop ranks on the taps |
| `rtl/tdc_encoder.sv` | event detection, ones count, bin folding |
| `rtl/frame_rate_control.sv` | frame start/stop |
| `rtl/histogram_generator.sv` | two-bank histogram and frame stream |
| `rtl/sync_adjuster.sv` | laser trigger |
| `rtl/phase_driver.sv` | registers and phase-shift sequencer |
| `rtl/tof_processor.sv` | top level |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/mmcm_model.sv`, `tb/spad_laser_model.sv` | models used by the top-level test |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. With
Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps \
  -y rtl -y tb +libext+.sv -Irtl rtl/tof_pkg.sv tb/tb_tof_processor.sv \
  --top-module tb_tof_processor -o sim
./obj_dir/sim
```

Replace the testbench name to run another one. All delays are written as time
literals (`833ps`), so the result does not depend on the default time unit.

`tb_tof_processor` runs the top level at its default sizes, in about two
minutes. It checks the following:

* the laser sync period (250 ns) and high time;
* every streamed frame against a histogram built from the true photon arrival
  times;
* the mean time of every frame, to within 0.3 bins;
* the mean time moves by -6.7 bins after +20 phase steps (300 ps) and by
  +10 bins after -30 steps;
* frames are dropped while the consumer stalls;
* no frames arrive after `run` is cleared;
* a full 20 ms frame with one photon per laser shot saturates its peak bin at
  65,535 and counts the overflow.

Each of these mechanisms is counted, and the test fails if one never happens.

The module testbenches check these points:

* the encoder, against an independent walk over the bin edges for all 448
  tap counts;
* the histogram generator, against a reference model, through random
  back-pressure, dropped frames and saturation;
* exact cycle timing in the sampler, encoder, frame control and sync;
* the phase-shift handshake, against a clock-manager model.

`tb_code_density` repeats the linearity measurement used to characterise the
prototype's TDC: a code density test.

* Stop pulses arrive at random times, unrelated to the clock, for four frames
  of 1,000,000 cycles each, at default sizes. That gives about 150,000 events.
* The test sums the frames and computes DNL(i) = (I(i) - I_avg) / I_avg and
  INL(i), the running sum of DNL. Both are in units of the 45 ps average bin.
* Because 448 taps do not divide evenly into 37 bins, bins are 12 or 13 taps
  wide. The 13-tap bins show a DNL of about +0.07 LSB.
* With the evenly tapped delay-line model, a run gives a DNL of -0.05 to
  +0.10 LSB and an INL of 0 to +0.17 LSB. The test requires every bin to be
  hit, |DNL| < 0.15 and |INL| < 0.55.
* The prototype's hardware measured a DNL of ±0.15 LSB and an INL of -0.55 to
  +0.15 LSB.
* The run takes about two minutes.

The prototype chose the 45 ps bin width because wider bins averaged out the
carry chain's uneven taps better. Only that 45 ps configuration (37 bins) is
built here. Another bin count can be set with the `NUM_BINS` parameter of the
encoder and histogram generator; it is not switchable at run time.

`tb_intensity_independence` shows the property the instrument is built on.

* It keeps the same arrival-time spread and lowers the detection rate from
  50 % of shots to 15 % and then 5 %, as neutral density filters would.
* At each step it compares the streamed W and `<t>` with values computed from
  the true photon times.
* Across the tenfold drop in intensity, `<t>` moves by less than 0.3 bin.
  Narrowing the spread from 100 ps to 40 ps, as stronger absorption would,
  lowers `<t>` by about 1.4 bins.
* The run takes about ten seconds.
