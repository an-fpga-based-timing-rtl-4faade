# DCS timing and trigger logic, locked to the 352 MHz ring clock

A laser shock experiment at a synchrotron has to line up four things. The
first is a single x-ray bunch, which the machine delivers on a 352 MHz RF
grid. The second is three mechanical and electro-optic x-ray shutters that
isolate that bunch. The third is a multi-stage UV laser whose amplifiers run
at 329 Hz and 2.7 Hz. The fourth is the shot diagnostics. The laser-to-x-ray
delay must stay put to within a few tens of picoseconds.

This design solves that with one idea. Every trigger is made in a single
clock domain, and that domain *is* the RF clock. The ring clock enters a
clock manager whose output phase can be moved in 17 ps steps. Everything
after it runs on that one 352 MHz clock:

- All slow rates are clock enables, not derived clocks.
- All delays are counts of those enables.

A trigger edge therefore always lands on an RF clock edge. There are two
exceptions, and both are finer:

- the clock manager's 17 ps phase step, which moves every output together;
- a 78 ps tap delay line on the laser triggers.

The RTL is SystemVerilog (IEEE 1800-2017). Apart from the two analog
elements, which are behavioural models, it is synthesizable. The figures
below are for the default parameters.

## Outputs

| Output | Rate | Delay control | Gated by laser state |
|---|---|---|---|
| `pseudo_p0` | 271.6 kHz (ring revolution, 1296 buckets) | none, reference | no |
| `pic_chopper` | 247.2 kHz = 88 MHz / 356 | 11.36 ns steps | no |
| `julich` (Jülich chopper) | 987.7 Hz | 3.68 µs + 11.36 ns steps | no |
| `hhlc_drv` (high-heat-load chopper driver) | 98.77 kHz, 1 µs pulse | slewed ±1 clock per period | no |
| `hhlc_ref` | driver / 356 | follows the driver | no |
| `ms_shutter` (millisecond shutter) | 2.74 Hz | 3.04 ms + 3.68 µs steps | single shot in Fire / Diagnostics |
| `dg1` | 329.2 Hz | 3.68 µs + 11.36 ns + 2.84 ns steps, then 78 ps taps | no |
| `awg` (seed-laser waveform generator) | 329.2 Hz | DG1's delay + 0..1023 clocks, then its own 78 ps taps | no |
| `dg2` | 2.74 Hz | 78 ps taps only | no |
| `dg3`, `dg4` | 2.74 Hz | 3.04 ms + 3.68 µs + 11.36 ns steps | see gate table |
| `laser_state_clk` | 987.7 Hz / (2 × state) | – | – |

Every pulse output is stretched to `OUT_PULSE_W` = 352 clocks (1 µs).

## Clock and phase

`mmcm_phase_shifter` models the FPGA clock manager. Its output is the input
clock delayed by `step × 17 ps`, taken modulo one period. It has the usual
dynamic phase-shift handshake:

- `psen` requests one step; `psincdec` gives its direction.
- `psdone` answers 12 `psclk` cycles later.
- `locked` rises 8 input cycles after reset.

`phase_step_ctrl` walks the phase from its current step count to the signed
target in register 9. It issues one step per `psdone`. Each step moves every
output at once, so this sets the timing of the whole system against the
bunch clock.

The model is only a delay. It does not synthesize a frequency and has no
jitter. In hardware the vendor primitive takes its place with the same ports.

## Rates: the divider chain

`divider_chain` is a cascade of `clock_divider` counters. Each counter
counts input enables and emits a one-clock enable on wrap:

```
352 MHz --/4--> 88 MHz --/324--> 271.6 kHz (P0) --/275--> 987.7 Hz --/3--> 329.2 Hz --/120--> 2.74 Hz
```

The chain has a property that the phase shifters depend on. Every enable
of a slower rate falls in the same clock as an enable of each faster rate.
The PIC chopper has its own ÷356 on the 88 MHz enable.

## Delays: cascaded shift registers

This is the part that needs the most care.

### How a stage works

A delay of up to one period of a slow trigger is built from up to three
`shift_ram` stages in series (`phase_shifter`). Each stage runs on a
different enable of the chain. A stage is a 1-bit circular buffer of
`DEPTH` entries:

- On each of its enables it writes its input and advances its pointer.
- Its output is the bit written `len` enables earlier.
- The output is combinational and ANDed with the stage's enable.

So a stage adds exactly `len` of its own enable periods and no pipeline
latency.

### Why stages can be chained

A pulse leaving a slow stage sits in a clock in which the next, faster
stage is also enabled. That is guaranteed by the alignment property of the
chain. The next stage therefore takes the pulse in the same clock. The
total delay of a trigger is

```
delay = l0·T0 + l1·T1 + l2·T2 + (fixed latency)
```

where:

- `Tk` is the period of stage k's enable, in 352 MHz clocks;
- `lk` is the 10-bit length field of stage k, `lk < Dk`.

The fixed latency, from the divider wrap to the first clock of the output
pulse, is 2 clocks. One clock is the phase shifter's output register; the
other is the pulse stretcher.

### Stage plans

| Output | Stage 0 | Stage 1 | Stage 2 | Range |
|---|---|---|---|---|
| julich | P0 (1296 clk) × 275 | 88 MHz (4 clk) × 324 | – | one 987.7 Hz period |
| ms_shutter | 329 Hz (1,069,200 clk) × 120 | P0 × 825 | – | one 2.7 Hz period |
| dg1 | P0 × 825 | 88 MHz × 324 | 352 MHz × 4 | one 329 Hz period |
| dg3, dg4 | 329 Hz × 120 | P0 × 825 | 88 MHz × 324 | one 2.7 Hz period |
| pic_chopper | 88 MHz × 356 | – | – | one PIC period |

The `awg` trigger is DG1's delayed trigger passed through one more
352 MHz stage, of depth `AWG_DEPTH` = 1023. So AWG always follows DG1 by
0..1023 clocks.

### Converting a delay to fields

To turn a delay into fields, divide by the largest stage period, then take
the remainder into the next stage, and so on. For example, 349,393 clocks
on DG1 is `l0 = 269` (348,624), `l1 = 192` (768), `l2 = 1`.

Delays longer than one period of the trigger are the same as their value
modulo the period. Software should reduce them first.

### Fine delay

`fine_delay` is a behavioural model of a 78 ps tap delay line with 37 taps
(0..2.886 ns). Register 8 holds one tap count each for `dg1`, `awg` and
`dg2`. In hardware this is an input/output delay primitive.

### Changing a delay and reset

Changing a length while a trigger is inside a stage may drop or repeat that
one trigger. After that the new delay holds.

Reset holds all logic for `RST_CLKS` = 1024 clocks after `rst` falls or the
clock manager regains lock. During that time every stage sweeps its buffer
and writes zeros, so no stale trigger survives.

## High-heat-load chopper

`hhlc_logic` divides the clock by 3564 to drive the chopper motor
(98.77 kHz). Each period starts a 1 µs pulse. A reference tick comes every
356 driver periods.

The chopper cannot jump in phase. Instead, register 7 holds a target phase
in clocks, `0 .. M-1`, where `M = 3564 × 356 = 1,268,784`. While the applied
phase differs from the target, each driver period is changed by one clock:

- 3565 clocks slips the phase;
- 3563 clocks advances it.

The direction is whichever way round M is shorter. The phase therefore
moves at one clock (2.84 ns) per driver period. `slewing` is high until it
arrives.

## Laser states and trigger gating

`serial_rx` receives 8N1 frames at 115200 baud. The ASCII digits `'1'`..`'5'`
select the laser state; any other byte is ignored.

| State | 1 Idle | 2 Charging | 3 At voltage | 4 Fire | 5 Diagnostics |
|---|---|---|---|---|---|
| ms shutter | blocked | blocked | blocked | single shot | single shot |
| DG3 | allowed | allowed | blocked | single shot | single shot |
| DG4 | blocked | blocked | blocked | single shot | single shot |

`laser_state_decode` turns the state into a mode for each gate.
`trigger_gate` then applies it:

- **allowed** passes every 2.7 Hz trigger;
- **blocked** passes none;
- **single shot** passes only the first trigger after the mode became
  single shot.

A gate re-arms only when its state is left. Entering Fire therefore fires
each gated output exactly once, on the next 2.7 Hz period after its
programmed delay.

`laser_state_clock` tells other equipment the state. It is a square wave
that toggles every `state` ticks of the 987.7 Hz enable.

## Registers

`control_regs` is an AXI4-Lite slave in the logic clock domain. It takes
one transaction at a time; the byte address is 4 × index.

| Index | Content |
|---|---|
| 0 | Julich delay |
| 1 | PIC delay |
| 2 | ms shutter delay |
| 3 | DG1 delay |
| 4 | AWG extra delay (after DG1) |
| 5 | DG3 delay |
| 6 | DG4 delay |
| 7 | HHLC phase target, clocks |
| 8 | fine taps: [5:0] AWG, [13:8] DG1, [21:16] DG2 |
| 9 | clock-manager phase target, signed, 17 ps steps |
| 10 | status (read only) |

A delay word is `{2'b0, l2[9:0], l1[9:0], l0[9:0]}`. The status word holds:

| Bits | Content |
|---|---|
| [2:0] | laser state |
| [4] | ms shutter fired |
| [5] | DG3 fired |
| [6] | DG4 fired |
| [8] | HHLC slewing |
| [9] | phase step busy |
| [10] | locked |
| [31:16] | current phase step |

## Where this departs from the source description, and what is not here

- **HHLC reference rate.** The published block diagram prints a ÷356 after
  the HHLC driver, but it also gives the reference as 82 Hz. The two do not
  agree: 98.77 kHz / 356 = 277 Hz, and 82 Hz would need roughly ÷1200. The
  printed divisor is kept as the default (`HREF_DIV`); change that parameter
  if the rate is what matters.
- **HHLC clock frequency.** The HHLC clock is described as "98.8 kHz" in one
  place and 82 Hz in another. The divider gives 98.77 kHz.
- **Rounded rates.** The Jülich rate is printed as 985 Hz. 352 MHz / 4 / 324
  / 275 is 987.7 Hz.
- **DG3 and DG4 resolution.** The published measurements list 78 ps for
  DG2–DG4. Here DG3/DG4 have 11.36 ns FPGA steps and DG2 has only the tap
  line. The finer steps on the original come from external delay
  generators, which are not part of this logic.
- **DG4 phase shifter.** The block diagram omits a phase shifter for DG4,
  while the trigger table and the control software give it one. This design
  follows the latter.
- **AWG.** The AWG delay is chained after DG1, as the block diagram shows.
  Here that takes the form of an extra 0..1023-clock stage rather than a
  full copy of DG1's cascade.
- **This design's own choices.** The register map, serial format, output
  pulse width, PIC divider (worked out from its 247 kHz rate), HHLC slewing
  rule and single-shot semantics are not given by the source and are this
  design's choices.
- **Not included:**
  - the processor, network stack and GUI, which write the registers;
  - the line drivers and connector board;
  - the external delay generators;
  - any jitter model. Jitter cannot be judged from this RTL.

## Simulation

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`.
It also has a watchdog. With plain Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb rtl/dcs_pkg.sv tb/tb_shift_ram.sv --top-module tb_shift_ram
./obj_dir/Vtb_shift_ram
```

Unit testbenches exist for each block:

- `tb_clock_divider`, `tb_divider_chain`, `tb_shift_ram`, `tb_phase_shifter`;
- `tb_hhlc_logic`, `tb_laser_state_decode`, `tb_trigger_gate`,
  `tb_laser_state_clock`;
- `tb_serial_rx`, `tb_control_regs`, `tb_phase_step_ctrl`;
- `tb_mmcm_phase_shifter`, `tb_fine_delay`.

Each compares against values worked out independently, including periods
and latencies in clock counts.

`tb_dcs_timing_top` runs the whole system end to end with small divisors.
It counts each mechanism and fails if one never happens:

- coarse delays, the AWG offset, fine taps;
- blocked, allowed and single-shot gating;
- HHLC slips and advances;
- clock-manager phase steps;
- serial commands;
- the state clock;
- the status register.

`tb_dcs_full` runs the system at its real sizes. It checks:

- the P0, HHLC, Jülich and DG1 periods;
- a programmed Jülich delay;
- a Fire command over the serial line, with single shots of the ms shutter,
  DG3 and DG4 at their programmed delays on the next 2.7 Hz period.

It simulates about 0.4 s of machine time. That takes about three and a
half minutes.

`tb_dcs_gui_settings` also runs at the real sizes. It programs a set of
operator settings and checks each result:

- a Jülich offset longer than one period, reduced modulo the period;
- a DG1 delay of 349,393 clocks with 8 fine taps (624 ps after the clock
  edge);
- an HHLC offset of 981,384 clocks, checking that slewing starts the shorter
  way round (3563-clock periods).

The full HHLC slew would take about 2.9 s of machine time and is not
simulated. The run takes a few seconds.
