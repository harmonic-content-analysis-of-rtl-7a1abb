# Soft-starting variable-frequency PWM generator for a three-phase induction motor

This is synthesizable SystemVerilog for an FPGA motor drive controller. It
produces the six gate signals of a two-level three-phase inverter, and three
settings control it:

* **output frequency**, 5 to 100 Hz. This sets the motor speed.
* **modulation index** `m`. This sets the output voltage.
* **soft-start time**. At start-up the modulation index rises from zero over
  this time, which limits the motor's inrush current.

All three PWM schemes here are carrier-based. A 4 kHz sawtooth carrier is
compared with three modulating signals that are 120 degrees apart. The
modulating signal can be:

* a plain sine (**SPWM**)
* a sine with an injected third harmonic (**THI-SPWM**)
* a sine plus the min/max common-mode signal (**SVPWM**). This gives the same
  pulses as space-vector modulation without its sector arithmetic.

The design follows a published FPGA drive, described in *Harmonic content
analysis of a soft starting variable frequency motor drive based on FPGA*
(Sapkota et al.). That design ran at 100 MHz on an Artix-7 board and drove a
200 W delta-connected motor through an isolated inverter board. The paper
gives the block structure, the table and carrier numbers, the state machine
and the modulation formulas. It does not give register-level detail. Those
details are worked out here, and each one is marked as such below and in the
source headers.

## One number scale for carrier and sine

Everything that gets compared lives on one integer scale: 125000 to 150000,
with zero at 137500.

* **Sine table.** It holds one sine period in 3600 entries (0.1 degree each).
  Each entry is `137500 + round(12500 * sin(angle))`. These are the range and
  zero point of the published table.
* **Carrier.** A carrier period at 100 MHz / 4 kHz is 25000 clocks, and the
  table's range is also 25000 counts wide. So the sawtooth is a plain up
  counter from 125000 to 149999, one count per clock. The comparator then
  compares table-scale numbers with no multiplier or scaling.

The table is not stored as a data file. `sine_lut` computes it at elaboration
with integer arithmetic:

1. Fold the angle into the first quadrant.
2. Convert it to radians in Q30 fixed point.
3. Evaluate the Taylor series up to `x^11` in Horner form.

Every entry comes out equal to the rounded floating-point value.

## Speed: a DDS-style index counter

A direct digital synthesiser adds a frequency word to a phase accumulator on
every clock. `vf_index_gen` does the same, but the "phase" is the table index
itself:

* Every clock, an accumulator gains `f * 3600`, with `f` in whole hertz.
* When it reaches 100,000,000 it wraps, and one index step is requested.
* Each step moves the U, V and W indices by one entry.
  * V trails U by 1200 entries (120 degrees) and W trails it by 2400.
  * A fourth index moves by three entries, giving `sin(3wt)` for THI-SPWM.
    This value is the same for all three phases.

The output frequency is exact on average, with one clock of jitter. At 60 Hz a
step falls every 462.96 clocks, and a sine period is 1,666,666.7 clocks.

A new frequency is taken over only when U wraps back to entry 0, so changes
happen at whole periods. Requests outside 5 to 100 Hz are clamped. The
accumulator keeps its remainder across a change. So the first period after a
change can be off by up to one step; later periods are exact again.

## Voltage: modulating signals and the modulation index

`mod_shaper` works on `s = value - 137500`. For each phase it computes:

| mode | modulating signal `y` |
|---|---|
| SPWM | `s` |
| THI-SPWM | `1.155 s + s3 / 6` (the 1.155 and 1/6 are the published ones) |
| SVPWM | `s - (max(s_u,s_v,s_w) + min(s_u,s_v,s_w)) / 2` |

The output is `137500 + m * y`, limited to the carrier range.

* The modulation index has 10 fraction bits (`1024 = 1.0`).
* The THI gains are 12-bit fractions (`4731/4096`, `683/4096`).

With THI-SPWM the sine's peak rises by 1.155 while the peak of the whole signal
stays at `m`. That is the usual gain in DC-bus use. SVPWM is built from the
plain sine exactly as its formula is written, with no 1.155 gain applied.

The comparator makes a phase's PWM high while its modulating value is above the
sawtooth.

## Soft start

`soft_start` raises `m` in a straight line from 0 to the target over `ss_ms`
milliseconds. The published design gives only the principle, not the ramp
shape or the time unit.

The ramp uses a Bresenham rate divider instead of a divider circuit:

* Every clock, an accumulator gains the target `m`.
* Whenever the accumulator reaches the ramp length in clocks, it loses that
  length and `m` rises by one LSB.
* So after `N` clocks, `m = floor(N * target / (ss_ms * 100000))`. It reaches
  the target exactly `ss_ms` ms after `run` rose.

Other behaviour:

* A target lowered later takes effect at once.
* A target raised later is approached at the same rate.
* `ss_ms = 0` turns the ramp off.
* `ss_ms` is 16 bits, so ramps up to 65.5 s are possible. The published
  soft-start plots span tens of seconds.

## The sequencing machine and the carrier period

This is the least obvious part of the design. `spwm_fsm` has the four states of
the published workflow diagram:

| state | meaning | left when |
|---|---|---|
| `ST_INIT` | reset to initial values; takes over new frequency and mode | `run` is high |
| `ST_COMPARE` | comparator output updated, pulses generated | an event below |
| `ST_IDX_UPD` | the three phase indices take one step | after one clock |
| `ST_SAW_RST` | the sawtooth is put back to its bottom | after one clock |

From `ST_COMPARE` the machine leaves:

* to `ST_SAW_RST` when a sawtooth period is complete
* to `ST_IDX_UPD` when an index step is pending
* to `ST_INIT` when a sine period is complete

The carrier counter never wraps by itself. Only `ST_SAW_RST` reloads it.
Because each side state lasts one clock, the machine must be in `ST_COMPARE`
when the count is one below its top:

* At that point it always moves to `ST_SAW_RST`. The reload then falls on the
  top count, and the carrier period is exactly 25000 clocks.
* No side state may start during the last three counts. This guard makes the
  rule above always possible.
* Otherwise a completed sine period is served before a pending index step.

An index step can wait up to three clocks. Step requests are at least 277
clocks apart, so no step is ever lost. An assertion in `vf_index_gen` watches
for this.

The comparator output holds during the one-clock side states. Because the
carrier keeps counting through them, this costs at most a 10 ns shift of a
pulse edge. The carrier period and output frequency are unaffected.

Dropping `run` sends the machine to `ST_INIT` from any state. It also stops
the carrier, zeroes `m` and turns every gate off.

## Dead time and the gate outputs

`dead_time` makes each leg's upper and lower gate signals from one PWM signal:

* After every PWM edge, both switches stay off for `DEAD` clocks. The default
  is 100 clocks, 1 µs.
* A pulse shorter than the dead time is swallowed.
* When `run` rises, the first switch turns on only after a full dead time.

The published design has a dead-time block but gives neither its circuit nor
its value. Both are this design's own. The gate signals are active high and
are named like the published scope traces: `u_hi`, `u_lo`, `v_hi`, `v_lo`,
`w_hi`, `w_lo`.

**Multiple crossings.** The sine here is sampled naturally, not held per
carrier period. So an index step just after the sawtooth crosses the sine can
lift the sine above the sawtooth again, and a re-crossing pulse of a few
clocks results. The dead-time stage swallows it. On the gates this shows up
as an off gap a little longer than `DEAD`. The published design updates its
indices independently of the carrier in the same way.

## Top level: `vf_motor_drive`

```
        run,freq_hz,mode                           mi_target,ss_ms
              |                                          |
  spwm_fsm <--+--> vf_index_gen --idx--> sine_lut x4     soft_start
     |  ^               (U,V,W,3U)          |               | m
     |  |                                   v               v
     |  +-- pre_top/near_top --+      mod_shaper <----------+
     |                         |            | mod (U,V,W)
     +--saw_reload--> sawtooth_gen --saw--> pwm_comparator --> dead_time x3 --> gates
     +--cmp_en------------------------------^
```

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | 100 MHz clock |
| `rst_n` | in | 1 | synchronous reset, active low |
| `run` | in | 1 | start (with soft start) / stop |
| `freq_hz` | in | 7 | output frequency in Hz, clamped to 5..100 |
| `mode` | in | 2 | `MODE_SPWM`, `MODE_THIPWM`, `MODE_SVPWM` |
| `mi_target` | in | 11 | modulation index, 1024 = 1.0 |
| `ss_ms` | in | 16 | soft-start time in ms |
| `gates` | out | 6 | `{u_hi,u_lo,v_hi,v_lo,w_hi,w_lo}` |
| `mi_now`, `ss_done` | out | 11, 1 | index in use, ramp finished |
| `freq_now`, `mode_now` | out | 7, 2 | frequency and mode in use |
| `state` | out | 2 | machine state |

**Timing**

* An index step reaches the comparator after three clocks: index register,
  ROM, shaper register.
* The comparator adds one clock and the dead-time stage one more.
* `freq_hz` and `mode` take effect at the next sine period. `mi_target` and
  `ss_ms` take effect at once.

**Size.** A coarse generic synthesis gives 238 flip-flops, about 260 word-level
cells and four ROMs of 3600 × 18 bits. The published build used 364 FFs,
385 LUTs and 4 BRAMs on the Artix-7. The four ROMs are one per read (U, V, W,
third harmonic), which matches that BRAM count. No FPGA mapping has been done
here.

## Where this RTL goes beyond the published description

The following come from the published design:

* the block list
* 100 MHz clock, 4 kHz carrier
* the 3600-entry table and its value range
* the 5 to 100 Hz range
* the DDS principle
* the four FSM states and their transitions
* the THI and SVPWM formulas

The following are this design's own choices:

* the accumulator form of the index counter and its 1 Hz resolution
* the phase order (V trails U)
* frequency and mode taken over at period start; the mode can be switched at
  run time (the published design changed the architecture)
* the FSM's priorities, one-clock side states and carrier-end guard
* a linear soft-start ramp in 1 ms units
* the fixed-point formats and the truncating arithmetic
* no 1.155 gain for SVPWM
* comparator polarity
* the dead-time circuit and its 1 µs default
* synchronous reset
* the status outputs

The published board used about 30 I/O pins; its user interface (switches,
buttons) is not described, so the settings here are plain input ports.

Not covered by this RTL: the clock oscillator, the isolator, the inverter
board and the motor.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_sine_lut` | all 3600 entries against floating-point `sin`; landmarks 137500/150000/125000; latency |
| `tb_sawtooth_gen` | count sequence, period of exactly 25000 clocks, flags |
| `tb_vf_index_gen` | every index against a model, 3600 steps per period, period length at 100 and 60 Hz, clamping, change at period start |
| `tb_soft_start` | `m` every clock against `floor(N*target/len)`, raise/lower/zero-time cases |
| `tb_spwm_fsm` | reset lands on the top count, request latency, carrier-end corner cases, state decode |
| `tb_mod_shaper` | the three formulas in floating point, random angles and `m`, exact cases |
| `tb_pwm_comparator` | comparison, hold outside the compare state, clear |
| `tb_dead_time` | gate outputs every clock against a history-based reference, gap = `DEAD` |
| `tb_vf_motor_drive` | end to end at full default size (see below) |
| `tb_workload_60hz` | the published 60 Hz points, see below |

**`tb_vf_motor_drive`** runs the whole drive at its default parameters for
about 8 million clocks:

1. soft start to `m = 0.8` at 100 Hz
2. switch to THI-SPWM
3. switch to SVPWM, with a 120 Hz request that is clamped
4. SPWM at 60 Hz
5. stop, then restart with no soft start

For every carrier period and leg, the measured leg average
`(clocks upper on - clocks lower on) / 25000` is compared with a model. The
model finds where the rising sawtooth meets the moving modulating signal,
which is natural sampling. It also checks that the soft start ends exactly 4 ms after
start-up. It counts each mechanism (index step, carrier reset, period
restart, soft-start completion, three modes, frequency change, clamp,
dead-time gap, stop/restart) and fails if one never happens.

**`tb_workload_60hz`** runs the published operating points: 60 Hz and 4 kHz
at `m = 0.4` in all three modes, and SPWM at `m = 0.6`. Over exactly three
sine periods it measures the line-to-line voltage by DFT:

* The fundamental is `sqrt(3)*m` for SPWM and SVPWM and `sqrt(3)*1.155*m` for
  THI, within 3 %.
* The line voltage has no third harmonic.
* A single pole voltage carries the injected `m/6` third harmonic (THI) or
  the common-mode signal (SVPWM).

The published work measured harmonic distortion on the motor itself, which is
outside what RTL simulation can show.

To simulate with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Irtl \
    rtl/vfd_pkg.sv tb/tb_vf_motor_drive.sv --top-module tb_vf_motor_drive -o sim
./obj_dir/sim
```

The same command works for any other testbench. The end-to-end test takes
about 5 s and the workload test about 15 s.

## Changing it

* **Carrier frequency.** Change `CARRIER_HZ` in `vfd_pkg`. To keep the
  comparator free of scaling, the table's range (`LUT_AMP`) should stay half
  the carrier period.
* **Table size.** `sine_lut` takes any `SIZE` divisible by 12. Phase offsets
  and the third-harmonic step need divisibility by 3, and the quarter-wave
  fold needs divisibility by 4.
* **Dead time.** Set `DEAD` on the top.
* **Soft-start time unit.** `CYC_PER_MS` sets the clocks per soft-start time
  unit. The unit tests shorten it.
