# Multi-threshold pulse digitizer from FPGA resources only

Time-of-flight PET scanners need the arrival time of each detector pulse to
a few tens of picoseconds, and its charge to reject scattered gamma quanta.
Such systems usually use analog discriminators and TDC ASICs for this. The
design here uses nothing but an FPGA:

* An **LVDS input buffer** works as a voltage comparator. The pulse goes to
  the `+` pin and a reference level to the `-` pin.
* A **carry chain**, the fast ripple path of the FPGA adders, works as a
  tapped delay line. A register bank samples it on every system clock edge,
  giving the time of each comparator edge to about one element delay
  (~15 ps).

Several comparators share one input pulse and are set to different
thresholds. Each has its own TDC. Each threshold then yields two points of
the pulse, the time it rises through the threshold and the time it falls
back, so the pulse is sampled in the *voltage* domain. From these 2×N
points the pulse start can be fitted, and the widths above each threshold
give the charge.

The RTL here covers the digital part: sampling, decoding, calibration,
time stamping, and grouping edges into per-pulse records. The two FPGA
primitives, the comparator and the delay line, are behavioural models with
picosecond delays, so the whole chain simulates from an analog waveform to
pulse records.

```
 signal_mv ──┬──► lvds_comparator(+) ◄─ vref_mv[0] (A, lowest)
             │          │
             │   carry_chain_delay_line ── taps[383:0]
             │          │
             │      tdc_channel ◄── coarse_counter (shared)
             │          │ hits (rising/falling, ts)
             │      tot_pair ── {lead, time over threshold}
             │          │
             ├──► … same for B, C, D ───────────┐
             │                                  ▼
             └──────────────────────────► pulse_builder ──► rec_valid, rec[4]
```

## Time measurement in a carry chain

The comparator output (STOP) enters element 0 of the delay line, and
`taps[i]` is the output of element i. An edge reaches tap i after the delays
of elements 0..i. On each rising edge of the system clock (START) the
register bank freezes the 384 taps. If the edge entered the line `d`
picoseconds before the clock edge, the first `k ≈ d / 15` taps hold the new
level and the others the old one:

```
tap 0 ............................................ tap 383
1111111111111111111110000000000000000 ... 000000      (rising edge, k = 21)
```

A time stamp has two parts:

* The **coarse** part is a shared counter of clock edges (`coarse_counter`).
  A sample is labelled with the count held just before its clock edge, so
  label `v` is the (v+1)-th clock edge after reset.
* The **fine** part `k` is converted to picoseconds by a per-channel table.
  By default the table holds the bin centre `15k + 7`.

The time stamp is `ts = coarse × 5000 − fine_ps`, in ps, counted from the
first clock edge after reset. It is 48 bits wide and wraps after about
78 hours. The line is longer than one clock period (384 × 15 ps = 5.76 ns
against 5 ns), so every edge is caught somewhere in the line.

### Pipeline of one channel (`tdc_channel`)

| stage | clock edge | what happens |
|---|---|---|
| 1 | E0 | taps and coarse count sampled (the START edge) |
| 2 | E1 | second register, lets meta-stable bits settle |
| 3 | E2 | level = majority of taps 0..2; edge if it differs from the previous sample; vector decoded |
| 4 | E3 | calibration table lookup |
| 5 | E4 | `hit = {valid, rising, fine, ts}` (and `hit_pre`) registered |

A hit is valid for one cycle, four clocks after its sampling edge. Edges are
reported from the third sample after reset onward.

Edges are found by comparing the STOP level at the head of the line between
consecutive samples. An edge that arrives in the last one or two element
delays before a clock edge has not yet changed the head of the line. The
next sample reports it instead, with a fine code just above one period
(≥ 334). Its time stamp is still correct, because the coarse count is one
higher as well.

### Two edges in one clock period

A narrow pulse can cross a high threshold upward and back down between the
same two clock edges. Its time over threshold is then under 5 ns and
straddles no clock edge. The level at the head of the line is the same in
both samples, so the level comparison above sees nothing. The sample does
hold the whole pulse, though. Taking a low level as the example:

```
tap 0 ............................................ tap 383
0000000000011111111111111111000000000 ... 000000
          a                 b
```

* The first transition, at `a`, is the pulse's trailing edge, `a` elements
  ago. The ordinary decoder finds it.
* The second transition, at `b`, is its leading edge. A second
  `thermo_decoder` finds it, working on the vector with taps below `a`
  forced to the pulse level.

Both edges are reported in the same cycle:

* `hit` carries the later (trailing) edge.
* `hit_pre` carries the earlier (leading) edge.

The table has a second read port for `hit_pre`. The pulse is reported only
if `a` is within one clock period's worth of taps (`a ≤ CLK_PS/ELEM_PS − 1`
= 332). The next sample still shows the same pulse, 333 taps further down,
and must not report it again. The two decoders in series are the longest
combinational path of a channel.

**Limit:** three or more edges of one threshold within one clock period
(two pulses inside 5 ns) are not resolved.

## Bubbles and how the fine code is decoded

Sampling a signal in flight makes some flip-flops meta-stable. The wires
from the chain to the flip-flops also differ in length. Either way, the
frozen vector can show *bubbles*, which are taps of the wrong level near the
transition:

```
clean   : 1111111111111 0000000000…
bubbled : 1111111011011 0000000000…
```

A plain "count the ones" decoder gives a result 2 too small here. A
"find the first 0" decoder gives 7 instead of 13. `thermo_decoder` places
the transition at **the first run of RUN = 4 consecutive taps holding the
old level**. Taps beyond the end count as old level. The code is the index
of that run. Isolated bubbles and runs of up to three bubbles inside the
switched region do not move the result unless they reach its last tap, so the bubbled vector decodes to 13,
the same as the clean one. For a falling edge the roles of 0 and 1 swap
(`new_level` input). The logic is a 384-input priority search, and it is the
largest combinational block of a channel.

RUN trades bubble tolerance against the shortest gap between two edges that
can still be told apart inside one vector. Four taps (60 ps) covers the
bubble zones usually seen in carry-chain TDCs. RUN is a parameter of
`thermo_decoder`.

## Calibration (non-linearity correction)

Carry-chain elements are not equal: some bins are wider than others, and the
errors add up along the line. Each channel has a `tdc_calib_lut` of 385
16-bit entries that maps fine code k to picoseconds, applied in real time.

* Reset loads the ideal table `15k + 7`.
* Any entry can be rewritten at any time: `cal_we`, `cal_ch`, `cal_addr`,
  `cal_data` on the top. A write takes effect on the next clock.
* The right value for entry k is the centre of bin k:
  `(T(k−1) + T(k)) / 2`, where `T(i)` is the delay from the line input to
  tap i and `T(−1) = 0`. On hardware `T` is usually estimated with a
  code-density test (a histogram of codes from random hits).
  `tb_mt_digitizer_nonideal` instead reads `T` from the delay-line model.

Temperature and supply voltage also change the element delays. No sensor or
correction for them is built. A host can re-load the tables when conditions
change.

## From edges to pulse records

`tot_pair` (one per threshold) stores a leading-edge time stamp. On the next
trailing edge it emits `{lead, tot = trail − lead}`, one clock later. When
`hit_pre` and `hit` arrive together, it applies `hit_pre` first, so a
narrow pulse gives its result at once. The
time over threshold saturates at 2²⁰−1 ps. A trailing edge with nothing
stored is dropped.

`pulse_builder` relies on the pulse geometry. Threshold A (index 0) is the
lowest, so its time over threshold encloses all the others, and A′ is the
last crossing of a pulse. All channels have the same latency, so the
measurements of B, C and D arrive no later than A's. The builder keeps the
latest measurement of each higher threshold. When A's measurement arrives,
it emits one record:

* `rec_valid` is high for one cycle.
* `rec[i] = {valid, lead, tot}` for i = 0..3. `valid` marks thresholds the
  pulse crossed, so a small pulse sets only the low ones.
* A stored measurement whose leading time is earlier than A's belongs to an
  earlier pulse and is left out.

The latency from A′ to `rec_valid` is six clock cycles after the clock edge
that samples A′.

The record holds up to eight (time, voltage) points. The voltage of each
point is the threshold setting, which is known to the host. Fitting a pulse
shape to the points, and turning the times over threshold into charge,
happen downstream. The design does not fix how.

## Top level: `mt_digitizer`

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | system clock, 200 MHz (period `CLK_PS` = 5000) |
| `rst` | in | 1 | synchronous, active high |
| `signal_mv` | in | `mv_t` (16, signed mV) | analog pulse, behavioural |
| `vref_mv` | in | 4 × `mv_t` | thresholds from an external DAC, [0] lowest |
| `cal_we`, `cal_ch`, `cal_addr`, `cal_data` | in | 1, 3, 9, 16 | calibration table write |
| `rec_valid` | out | 1 | one pulse record this cycle |
| `rec` | out | 4 × `thr_meas_t` | per threshold: valid, lead (48-bit ps), tot (20-bit ps) |

| parameter | default | origin |
|---|---|---|
| `NUM_THR` | 4 | four-threshold scheme of the method; can be raised |
| `ELEM_PS` | 15 | element delay of the carry chain (~15 ps) |
| `TAPS` | 384 | own choice: covers one 5 ns period with margin; must be ≤ 511 and `TAPS*ELEM_PS > CLK_PS + ELEM_PS` |
| `CLK_PS` | 5000 | own choice (200 MHz) |
| `CMP_PS` | 500 | own choice, comparator delay in the model |
| `SPREAD_PS`, `SKEW_PS` | 0 | delay-line model only: element delay spread, skewed taps |

The shared types and widths are in `rtl/tdc_pkg.sv`.

## What is modelled and what is synthesizable

* `lvds_comparator` and `carry_chain_delay_line` are behavioural models.
  They use intra-assignment delays with transport semantics, and analog
  values are integer millivolts.
  * On an FPGA these are a differential input buffer and a hand-placed
    adder carry chain.
  * The comparator model does not clip its inputs. A real buffer accepts
    roughly 0-2 V.
  * The models have no jitter, so the simulation shows only quantisation
    error.
* Everything else (`coarse_counter`, `thermo_decoder`, `tdc_calib_lut`,
  `tdc_channel`, `tot_pair`, `pulse_builder`) is synthesizable.
* The calibration tables are 385 × 16 bits per channel. They can map to
  distributed RAM or block RAM.

## Where this follows the method and where it is its own

These follow the method:

* the comparator rule;
* delay-line sampling on the clock edge;
* element delay of about 15 ps;
* bubbles, and both of their causes;
* real-time non-linearity correction;
* one comparator and one TDC per threshold, four thresholds;
* pairing of leading and trailing edges.

These are this design's own choices:

* clock frequency and line length;
* the coarse counter and time-stamp format;
* the second sampling stage;
* resolving two edges per clock period;
* the majority-of-three level;
* the decoding rule (run of 4);
* the calibration table format and write port;
* the pulse record and its closing rule;
* all bit widths.

Not built:

* the external DAC (its thresholds come in as ports);
* temperature and voltage correction;
* read-out of records off the FPGA;
* the multi-FPGA board that hosts many such channels.

## Verification

Every testbench is self-checking. Each prints
`TB_RESULT checks=N failures=M`, and each has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_lvds_comparator` | output before/after the delay for random levels, equality, signed values |
| `tb_carry_chain_delay_line` | thermometer pattern 15k+7 ps after edges; element spread bounds; a skew bubble |
| `tb_coarse_counter` | reset, counting, wrap |
| `tb_thermo_decoder` | all clean codes of both polarities; the bubbled example above; 400 random bubbled vectors |
| `tb_tdc_calib_lut` | reset table, writes, out-of-range code, both read ports |
| `tb_tdc_channel` | 40 edges: latency of exactly 4 clocks, polarity, fine code, time stamp; late catch; calibrated entry; 20 short pulses on `hit`/`hit_pre`, each reported once; no extra hits |
| `tb_tot_pair`, `tb_pulse_builder` | pairing, two edges in one cycle, saturation, record assembly, partial and stale cases |
| `tb_mt_digitizer` | end to end at default parameters (see below) |
| `tb_mt_digitizer_nonideal` | uneven and skewed line: measured calibration, bubbles, pulse accuracy |
| `tb_fig4_ramp` | two-channel discriminator measurement: ramp against level N |

`tb_mt_digitizer` plays triangular pulses in 1 ps steps. It checks every
leading time within ±10 ps and every time over threshold within ±20 ps of
the analytic crossing times. It also counts, and requires, five events:

* a pulse that crosses all thresholds;
* a pulse that crosses only two;
* narrow pulses (1 ns rise, 2 ns fall) whose threshold crossings fall in
  one clock period;
* a late-caught edge;
* a re-programmed calibration table (+100 ps per entry of channel 0), which
  must move that channel's leading times 100 ps earlier.

`tb_fig4_ramp` compares a 25 ns, 0-2000 mV ramp against levels of 400, 800,
1200 and 1600 mV, plus a reference channel. The measured delay grows
linearly, 12.5 ps per mV, and each result is within two bins of the ramp
crossing. The mean error is ≤ 2 ps, and the rms over ten random clock
phases is 0-4.5 ps, which is quantisation only. The absolute times measured
on real hardware depend on the generator's amplitude and the cabling, so
they are not reproduced.

With the non-ideal line (15±3 ps elements, every eighth tap 20 ps late),
roughly one sampled edge in ten contains a bubble. After calibration the
leading times stay within 25 ps.

To run a testbench with Verilator 5 from the folder that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/tdc_pkg.sv tb/tb_mt_digitizer.sv --top-module tb_mt_digitizer -o sim
./obj_dir/sim
```

The full-size end-to-end test builds in about 1.5 minutes and runs in a few
seconds. Every module declares `timeunit 1ps`.
