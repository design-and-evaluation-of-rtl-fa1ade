# FPGA-ADC front end for a LYSO/SiPM PET detector module

A PET detector block here is a LYSO crystal array read out by an 8 × 8 SiPM
array. An analog resistor network turns its 64 anodes into three signals:
- E, the total energy;
- Ex and Ey, the energy weighted by column and row gain.

Four leading-edge discriminators, ORed together, give a timing trigger.
Normally these signals would need three ADCs and a TDC. This design uses none
of those chips. The FPGA digitises the three signals itself with
**FPGA-ADCs**, and it also does all the event processing:
- timing, baseline and integration;
- flood-map position and crystal lookup;
- saturation and time correction;
- packing each event into one word.

This repository holds the digital part as synthesizable SystemVerilog. It
also holds a behavioural model of the carry-chain delay line and testbench
models of the analog parts.

## The FPGA-ADC: amplitude measured as a time

A 25 MHz clock leaves the FPGA through an output pin. It passes a 90 Ω series
resistor into a pad with about 180 pF of capacitance. The RC filter
(τ ≈ 16 ns against a 20 ns half-period) turns the square wave into a
quasi-triangular ramp. With a 3.3 V bank it swings between about 0.74 V and
2.56 V.

An LVDS input receiver compares the analog signal with this ramp. Its output
is high while the signal is above the ramp. In each 40 ns ramp period it
therefore gives one pulse, and the pulse gets wider as the amplitude grows.
A TDC stamps both edges of the pulse. The width `fall − rise` is the sample,
so one sample is produced per ramp period (25 Msps).

The relation between width and voltage is monotonic but not linear, because
it follows the exponential RC ramp. The design passes widths on uncorrected.
Everything downstream works in "width units": energies are sums of widths.
A linearising table could be inserted after `width_calc` without touching the
rest.

Special cases in one ramp period:
- **Signal above the ramp maximum.** The comparator never falls. Either only
  one edge arrives, or the level stays high. The sample saturates at 8191 and
  `over_range` is set.
- **Signal below the minimum.** No edge arrives and the level stays low. The
  sample is 0 and `under_range` is set.
- **Edges that arrive in the same cycle as the sample tick** are counted in
  the next period.

### Clocking

All logic runs from one clock, `clk`, at 250 MHz (a 4 ns period).

`ramp_clock_gen` divides `clk` by 10 to make the 25 MHz ramp clock. The ramp
is therefore locked to the TDC. It falls during phases 0–4 and rises during
phases 5–9. A `sample_tick` in phase 3 closes each period. The same block
keeps the free-running 31-bit coarse counter that all TDC channels share.

The three ADCs share one ramp output, as the detector needs for uniform
response across the array.

## The TDC: carry chain, encoder, code-density calibration

Time stamps are `{coarse[30:0], fine[8:0]}`. One LSB is 4 ns / 512 =
7.8125 ps. A stamp is `coarse·512 − fine`, where `fine` is the 9-bit time
from the edge to the sampling clock edge.

The TDC has three parts:

- **`carry_chain`** (behavioural model). This is a 256-tap delay line
  sampled on every `clk` edge. The real thing is the FPGA's carry logic and
  cannot be written as portable RTL. The model keeps the last few input edge
  times and sets tap *i* to the input level at `now − delay(i)`. Tap delays
  alternate 8 ps / 24 ps, copying the uneven bins of real carry chains, so
  250 taps span one clock period.

- **`tdc_encoder`**. This searches taps 1..250 for the youngest 1→0 step (a
  rising input edge) and the youngest 0→1 step (a falling edge). The
  position of a step is the number of taps the edge has travelled since it
  arrived. The fixed window makes every edge appear exactly once. The
  encoder handles at most one edge of each polarity per 4 ns, which is
  plenty for 40 ns ramp pulses.

- **`tdc_calib`**. Because the bins are unequal, the raw tap position is not
  a time. During calibration the comparator sees edges at random phase.
  `tdc_calib` counts 2^14 of them in a histogram of bins. A bin's share of
  the hits is its share of the period, so the centre of bin *p* lies at

      fine(p) = 512 · (Σ_{j<p} h_j + h_p / 2) / 2^14

  on the 9-bit scale. A sequential pass writes this into a 251-entry table
  (bins 0..250).
  Two lookups run per cycle, one for the rise bin and one for the fall bin.
  Before the first calibration, a uniform mapping `p·512/250` is used.
  Running the calibration again tracks temperature drift.

In the top module, a write to configuration region 6 calibrates all four
channels at once: the hit TDC and the three ADCs. During calibration, the
analog inputs must carry random-phase edges. The testbench front-end model
has a `cal_mode` for this.

With 2^14 hits the statistical error of a bin centre is a few ps. The
channel testbench sees single-edge errors within ±60 ps and a mean error of
about −2 ps.

`tdc_channel` = chain + encoder + calibration. It reports an edge two clock
cycles after the edge in which it was sampled.

## Event processing

```
hit_i ─ TDC ─┬────────────────────────────── time ─ time_correction ─┐
             └ hit_delay (8 periods) ─ start ┐                        │
comp_i[c] ─ fpga_adc ─┬─ integrator (15) ────┼─ energy_calc ─ position_calc ─ pixel_index_lut ─┤
                      └─ baseline_calc (8) ──┘        └────────── energy_correction ──────────┤
                                                                               data_package ──┴─ event_o
```

- **`hit_delay`**. It accepts a hit only when idle and marks the onset. Eight
  sampling periods later it starts the integration, leaving room for the
  shaped pulse to arrive. Hits that arrive before the integration finishes
  are ignored and counted on `hit_ignored`. The dead time is therefore
  (8 + 15) × 40 ns = 920 ns.
- **`baseline_calc`**. A running sum of the last 8 samples, frozen at the
  onset.
- **`integrator`**. The sum of the 15 samples (600 ns) after `start`.
- **`energy_calc`**. `(8·Σ15 − 15·Σ8) / 8` for each of E, Ex and Ey. This is
  the integral minus 15 baseline means, with the fraction kept until the last
  shift. The result is signed, so a pure-noise event can come out negative.
- **`position_calc`**. `x = ⌊512·Ex/E⌋`, `y = ⌊512·Ey/E⌋`, clamped to 0..511.
  It uses a serial restoring divider, 9 quotient bits, 11 cycles. `ok = 0`
  when E ≤ 0, and such events are dropped.
- **`pixel_index_lut`**. The flood map is divided off line into one region
  per crystal. Two tables, each 512 × NB × 9 bits, hold the boundaries:
  - `lut_by_x[x]` holds the NB row boundaries (in y) at column position x;
  - `lut_by_y[y]` holds the NB column boundaries (in x) at row position y.

  Boundary *j* is the lower edge of region *j*. The row is the number of
  boundaries ≤ y, minus one. A position below boundary 0 is outside the map,
  and the event is dropped. `pixel = row·NB + col`. Because each boundary
  may change with the other coordinate, the division need not be a
  rectangular grid, which matters for pincushion-distorted flood maps.
- **`energy_correction`**. SiPM saturation is undone with
  `p = −N·ln(1 − b·k/N)`. Here k is the measured energy, b the pixel's gain
  and N the number of microcells. The calculation runs in four pipeline
  stages:
  1. Read `c = b/N · 2^28` (14 bits) for the pixel.
  2. Form `x = 2^14 − (c·k >> 14)`. This is 1 − b·k/N as a 14-bit
     fraction. `clipped` is set when it would reach zero.
  3. Read `−ln(x/2^14) · 2^10` from a 16384 × 14-bit table.
  4. Multiply by N and shift right by 10.
- **`time_correction`**. `t = t_raw − offset[pixel] − (slope·k) >>> 8`.
  - The per-pixel offset (signed 16 bits, 7.8 ps LSB) removes each crystal's
    propagation delay.
  - The single slope is the linear time-walk correction of the leading-edge
    discriminator against the measured energy.
- **`data_package`**. It collects the time, energy, pixel and raw position,
  which arrive in any order. Once all are in, it sends one `event_t` word
  with a one-cycle `event_valid`. There is no back-pressure: events are at
  least 920 ns apart.

### Event word (`event_t`, 86 bits, MSB first)

| field   | bits | meaning |
|---------|------|---------|
| time_ps | 40   | corrected hit time, 7.8125 ps LSB |
| energy  | 20   | saturation-corrected energy |
| pixel   | 8    | crystal index row·NB + col |
| raw_x   | 9    | flood-map x |
| raw_y   | 9    | flood-map y |

## Configuration port

`cfg` is `{we, addr[19:0], data[31:0]}`. `addr[19:16]` selects the region:

| region | content | entry address |
|---|---|---|
| 0 | row boundaries by x, 9 bits | {x[8:0], j[3:0]} |
| 1 | column boundaries by y, 9 bits | {y[8:0], j[3:0]} |
| 2 | per-pixel b/N · 2^28, 14 bits | pixel |
| 3 | −ln(x/2^14)·2^10, 14 bits, x = 1..16383 | x |
| 4 | per-pixel time offset, signed 16 bits | pixel |
| 5 | 0: N (16 bits), 1: walk slope (signed 16 bits) | register |
| 6 | any write: start TDC calibration | — |

The tables are not reset. They must be written before events are
meaningful. The end-to-end testbench shows the loading sequence and computes
every table from its formula.

## Parameters

| parameter | default | where |
|---|---|---|
| TAPS, WIN | 256, 250 | delay line length; encoder window (taps per clock period) |
| CAL_LOG2 | 14 | hits per calibration = 2^14 |
| NB | 8 | crystals per row/column, boundaries per table entry (up to 16) |
| NINT | 15 | integrated samples (600 ns) |
| NPTS | 8 | baseline samples |
| DELAY | 8 | sampling periods from hit to integration start |

For the 12 × 12 light-sharing crystal array, set `NB = 12`. The top sizes
the per-pixel coefficient and offset tables as NB × NB, so this gives 144
entries. The boundary tables grow to 512 × 12 × 9 bits. The 8-bit pixel
field and the 4-bit boundary address allow up to 16 × 16 crystals.

## Where this design departs from the original system, or adds to it

These follow the original system:
- the ramp principle, 25 MHz and 90 Ω;
- the 9-bit normalised fine time (about 7.8 ps);
- the 8-sample baseline, the 8-period delay and the ~600 ns integration;
- position as an energy ratio on a 512-point grid;
- two boundary tables of 512 × 8 × 9 bits;
- the logarithmic saturation formula with 14-bit tables;
- the per-pixel delay and linear time-walk corrections;
- one packed event per hit.

These are this design's own choices:
- The 250 MHz TDC clock and the ramp clock divided from it.
- The encoder window, and code-density calibration as the nonlinearity
  correction.
- All widths beyond those above, the event word layout and the
  configuration map.
- Storing b/N per pixel and a single N register.
- A single global walk slope, applied to the uncorrected energy.
- The lower-edge boundary convention, and which coordinate addresses which
  table.
- Dropping events with E ≤ 0 or outside the map, and ignoring hits during
  the dead time.

Differences to be aware of:
- The dead time is 920 ns: 8 delay periods plus 15 integration periods. The
  original system quotes about 600 ns as its maximum dead time.
- The width-to-voltage nonlinearity of the RC ramp is not corrected.
- Row/column gradient-gain compensation of Ex and Ey is not in the datapath.
  Fold it into the boundary tables instead.
- The sine test gives about 5.0 effective bits. The original system's
  simulation reports about 5.8 bits at 1 MHz, and its measurement 5.5 bits
  at 1 MHz and 4 bits at 5 MHz. The model here holds the input constant over
  each ramp period and has no noise.
- Calibration uses rising edges only, and one table serves both edge
  polarities.
- The carry chain is a behavioural model. On an FPGA it must be replaced by
  a placed chain of carry primitives with registered taps, with the same
  `taps` output.

## Files

- `rtl/fpga_adc_pkg.sv`: types, constants and the configuration map.
- `rtl/*.sv`: one module per file. `fpga_adc_pet_top` is the top.
- `tb/tb_<module>.sv`: one self-checking testbench per module. Each prints
  `TB_RESULT checks=… failures=…` and has a watchdog.
- `tb/frontend_pkg.sv` and `tb/adc_frontend_model.sv`: a real-valued model of
  the RC ramp and the LVDS comparator (exact exponential ramp, 3.3 V, τ =
  16.2 ns). The ADC and top testbenches compute their expected widths from
  it.
- `tb/tb_fpga_adc_pet_top.sv`: the end-to-end test at default parameters.
  1. It loads all tables and calibrates the TDCs.
  2. It sends 40 gamma events with shaped pulses on E, Ex and Ey. The events
     use the gradient gains 1 … 0.125 and random positions, energies and
     times.
  3. For each event it predicts every ADC sample, the energies, the position,
     the pixel, the corrected energy and the corrected time.
  4. It checks that calibration, accepted events, ignored hits, off-map
     drops and over-range samples each happened.

  It simulates about 0.5 ms in about a second.
- `tb/tb_fpga_adc_sine.sv`: the dynamic test of one ADC channel. It uses
  near-full-swing sines (0.8–2.5 V) at 1.025 MHz and 4.975 MHz, with 1000
  coherent samples each. It fits a sine to the raw width stream and reports
  the effective number of bits. The result is about 5.0 bits at both
  frequencies, the same as the ideal RC-ramp widths give. The harmonics of
  the exponential ramp dominate, not the TDC.
- `tb/tb_fpga_adc_pet_top_12x12.sv`: the same procedure with `NB = 12`, for
  12 × 12 crystals on the 8 × 8 SiPM array. Each crystal's light is split
  linearly between the two SiPM rows (or columns) nearest its centre. The
  12 resulting flood positions per axis place the boundaries.

## Simulating

With Verilator 5, for example for the top-level test:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/fpga_adc_pkg.sv tb/frontend_pkg.sv rtl/*.sv tb/adc_frontend_model.sv \
  tb/tb_fpga_adc_pet_top.sv --top-module tb_fpga_adc_pet_top
./obj_dir/Vtb_fpga_adc_pet_top
```

Block testbenches need only the package, the module and its submodules. The
`--timing` flag is required because the delay-line model and the front-end
model use delays. Simulation is two-state: registers read before reset must
be reset, and all tables must be written before they are read.
