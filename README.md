# Ring-oscillator time-to-digital converters for 4D pixels

A 4D pixel records where a particle hit and also when, to a few tens of
picoseconds. That needs a time-to-digital converter (TDC) small and frugal
enough to fit in every 100 × 100 µm² pixel. The two TDCs described here use
the same idea. A ring with an odd number of inverting stages oscillates once
it is released. START releases it, and STOP takes a snapshot. The snapshot has
two parts:

* **where the inversion wave is in the ring**: the fine part, one stage delay
  per step;
* **how many times the wave has gone past the end of the chain**: the coarse
  part, held in a small counter.

Put together, `COUNT|INV` is a code for the START–STOP interval, and a
calibration maps it to a time. The two TDCs differ in how they read the wave's
position:

| | fully digital TDC | semi-analog TDC |
|---|---|---|
| ring | NAND on START + 20 fast inverters (21 stages) | NAND on START + 8 slower inverters (9 stages) |
| position readout | 21 differential flip-flops clocked by STOP → `INV[20:0]` | STOP cuts every stage from its supply; the 9 node voltages are held and read as analog lines `INV[8:0]` |
| counter | 7 bits | 6 bits |
| published area | 110 × 60 µm² (UMC 110 nm) | ≈ 25 × 50 µm² (LFoundry 110 nm) |

The design follows the paper "Development of a timing chip prototype in 110 nm
CMOS technology" (M. Senger et al., 2021). This RTL was written from that
description, not by its authors. Whatever the paper leaves open was decided
here, and each such choice is marked below.

## What is synthesizable and what is a model

The time base of both TDCs is the propagation delay of full-custom inverters.
Ordinary RTL cannot express that: a ring of inverters is a combinational loop,
and only its delays give it meaning. So the design is split as follows:

| module | kind | what it is |
|---|---|---|
| `tdc_pkg` | package | stage counts and widths shared by all modules |
| `diff_dff` | synthesizable | differential sampling flip-flop |
| `tdc_counter` | synthesizable | pass counter, parameter `WIDTH` (7 or 6) |
| `fd_ring_osc` | behavioural model | 21-stage ring of the fully digital TDC, transport delays |
| `fd_aux_chain` | behavioural model | open 22-inverter auxiliary chain |
| `fd_tdc` | structural | fully digital TDC: ring, chain, 21 × `diff_dff`, `tdc_counter` |
| `sa_ring_osc` | behavioural model | 9-stage ring of the semi-analog TDC with its power switches, time-stepped |
| `sa_tdc` | structural | semi-analog TDC: ring and `tdc_counter` |
| `tdc_prototype` | structural top | the two TDCs side by side, each with its own pins |

On silicon the two TDCs are separate test structures made in two different
processes. `tdc_prototype` only puts them under one top so that a single
simulation can drive both. It adds no logic of its own.

When a synthesis tool ignores the delays, it reports the rings as logic loops
and turns the held node voltages of `sa_ring_osc` into latches. Both are
expected.

## The fully digital TDC

### Structure

```
 START ─┐
       NAND ─●─ inv1 ─●─ inv2 ─●─ … ─ inv20 ─●─┐     ring: node[0..20]
   ┌────┘    │        │        │             │  │
   │         inv      FF1      FF2  …       FF20 │
   │         │        │        │             │  │
   │         ●─ inv ──●─ inv ──●─ … ─ inv ────●─ inv ── counter (7 bit)
   │       aux[0]   aux[1]   aux[2]        aux[20] aux[21]
   └──────────────────────────────────────────────┘
       FF0 sits between node[0] and aux[0]; all FFs are clocked by STOP
```

`node[0]` is the NAND output and `node[k]` the output of ring inverter `k`.
`node[20]` closes the ring back onto the NAND. The auxiliary chain starts
with an inverter driven by `node[0]`. Its node `aux[k]` is therefore the
complement of `node[k]`, one inverter delay later. Flip-flop `k` receives the
pair (`node[k]`, `aux[k]`). The 22nd auxiliary inverter, `aux[21]`, drives
the counter.

### Rest state and why INV reads all zeros

With START low the NAND output is 1, and the nodes settle to 1, 0, 1, 0, …
along both chains (`node[k]` = 1 for even `k`, `aux[k]` the opposite). The
flip-flop inputs are connected with alternating polarity. For even `k`, D is
`aux[k]` and D_N is `node[k]`. For odd `k` it is the other way round. With
this wiring every flip-flop reads 0 at rest, and once the wave has passed a
stage that stage's bit reads 1.

### Sampling rule (choice of this design)

The circuit of the differential flip-flop is not published. `diff_dff` stores
`Q = D & ~D_N` on the rising edge of STOP. A pair that is clearly in the
"wave has passed" polarity reads 1. A pair whose two members are momentarily
equal (the ring node has switched but its auxiliary twin has not yet) reads 0.

### Counter (choices of this design)

`tdc_counter` increments each time the wave passes its input, on rising and
falling edges alike. This follows the published description, in which the count
goes up each time the wave passes the last node; a counter of whole oscillation periods
would be the other possible reading. It is built as two counters, one per
edge, whose sum is `count`. It counts only while STOP is low, so STOP freezes
it. It is cleared asynchronously while START is low. The clear is this
design's choice: the paper only says the counter starts at 0. It wraps modulo
2^WIDTH.

### Timing and the code map

The inverter and NAND delays are not published. The defaults
`T_INV = 28 ps` and `T_NAND = 30 ps` are of the order of the ≈30 ps mean
output width measured on the chip. With START rising at t = 0:

* ring node `k` switches at `T_NAND + k·T_INV + p·L`, where
  `L = T_NAND + 20·T_INV` = 590 ps and `p` = 0, 1, 2, … counts the passes;
* `aux[k]` switches one `T_INV` after `node[k]`;
* the counter input switches at `T_NAND + 22·T_INV + p·L` = 646 ps + p·590 ps.

The resulting codes (`COUNT|INV`, with `INV[20]` on the left) are:

| START→STOP interval (ps) | COUNT\|INV |
|---|---|
| 0 – 58 | `0\|000000000000000000000` |
| 58 – 86 | `0\|000000000000000000001` |
| … one more 1 every 28 ps … | |
| 590 – 618 | `0\|011111111111111111111` |
| 618 – 620 | `0\|111111111111111111111` |
| 620 – 646 | `0\|111111111111111111110` |
| 646 – 648 | `1\|111111111111111111110` |
| 648 – 676 | `1\|111111111111111111100` |
| … one more 0 every 28 ps … | |
| 1180 – 1236 | `1\|000000000000000000000` |
| 1236 – 1238 | `2\|000000000000000000000` |
| 1238 – 1266 | `2\|000000000000000000001` |

Three things show in this map:

* **The code is a Johnson-style thermometer.** Ones fill in from `INV[0]` on
  one pass and zeros on the next, so a loop of the ring has about 42 codes.
  COUNT and the INV pattern together are unique over 0–10 ns. This was
  checked: 371 distinct codes, and none reappears once left.
  The mean bin is 27 ps and the widest 58 ps. That is of the order of the
  measured full width of one output's spread (below 60 ps, mean about
  30 ps), which the delay defaults were chosen to match.
* **The bins are not all equal.** A bit turns on one inverter delay after its
  ring node switches, when the auxiliary twin catches up, but turns off as
  soon as the ring node switches back. So the all-ones code lasts only
  `T_NAND − T_INV` (2 ps) and the second-half all-zeros code
  `T_NAND + T_INV` (58 ps). The 1→2 count step also splits a bin. A real
  chip's per-code calibration absorbs this. With other delays or another
  flip-flop rule the details change.
* **The delays disagree with the paper's own example.** The paper gives
  "2|000000000011111111111 → 1 ns". With the counting rule above, that would
  need about 18.5 ps per stage. With the defaults here that code is reached at
  about 1.55 ns. The measured output widths were preferred over the
  illustrative example.

The paper calls the architecture "Vernier" but also says both chains use
identical inverters. Both chains therefore share one delay here. `fd_ring_osc`
and `fd_aux_chain` each have their own `T_INV` parameter if a Vernier delay
difference is wanted.

## The semi-analog TDC

### Freezing the wave

The ring has 9 inverting stages (NAND on START plus 8 inverters). The analog
lines `INV[0..8]` are its node voltages, and the 6-bit counter sits on the
last node. STOP, through an inverter, opens switches between every stage and
both supply rails. From then on no node can charge or discharge, so the
parasitic capacitance of each node holds its voltage. The node that was
part-way through its transition at STOP holds an intermediate voltage. That
intermediate value tells where within the stage delay the STOP fell, which is
why these inverters may be slower than the digital ones. The counter needs no
STOP input: once the ring is frozen its input no longer switches.

### The model (`sa_ring_osc`)

Node voltages are integer codes from 0 (ground) to 1000 (supply) on
`AMP_W` = 10-bit buses. Time is stepped every `DT` = 1 ps. At each step a
powered stage moves its output by `STEP = 1000·DT/T_RISE` towards the rail
opposite to its input's logic level, where the threshold is 500. An input
exactly at 500 leaves the output where it stands. With the default
`T_RISE = 200 ps`:

* a node takes 200 ps to swing rail to rail;
* stage `k+1` starts moving exactly `T_RISE/2 + DT` = 101 ps after stage `k`;
* one loop takes 9 × 101 = 909 ps.

START and STOP are read at the model's time steps, so drive them between
steps. The testbenches place them half a picosecond off the step grid.

The model has no leakage, noise, mismatch or realistic transfer curve. It
reproduces the mechanism (sequential smooth transitions, held charge, finer
bins with more ADC bits) but not the measured resolution.

### Digitising

The ADC is part of the test system, not of the chip, so it is not included.
The testbenches quantise each held line to 1 bit (`amp > 500`) or 3 bits
(`amp·8/1001`). Over 0–10 ns in 5 ps steps, 1-bit readout gives 99 distinct
codes (one per stage delay, like the digital TDC) and 3-bit readout gives 456,
with a mean bin of 22 ps and none wider than 25 ps at that step.
This shows the finer time bins that multi-bit digitisation of the frozen
lines buys.

## Interfaces

`fd_tdc`: inputs `start`, `stop`; outputs `inv[20:0]`, `count[6:0]`.

* `inv` changes only on the rising edge of `stop`.
* `count` is frozen while `stop` is high and cleared while `start` is low.

A measurement goes like this:

1. Raise `start`.
2. Raise `stop` after the interval to be measured.
3. Read the outputs.
4. Lower `start`.
5. Wait for the chains to settle (at least two loop times, about 1.2 ns).
6. Lower `stop`.

`sa_tdc`: inputs `start`, `stop`; outputs `inv_amp[8:0]` (10-bit amplitude
codes), `count[5:0]`.

* The amplitudes follow the ring while `stop` is low and are held from its
  rising edge.
* Lower `start` while `stop` is still high. That clears the counter without
  disturbing the held lines.
* After `stop` falls, the ring needs about 1.1 ns to return to rest.

`tdc_prototype` has the same pins with the prefixes `fd_` and `sa_`.

## Simulating

All modules set `timeunit 1ps; timeprecision 1fs`. The models need
Verilator's timing support. End-to-end test of both TDCs at the default sizes
(about one minute):

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
  rtl/tdc_pkg.sv tb/tdc_ref_pkg.sv tb/tb_tdc_prototype.sv \
  --top-module tb_tdc_prototype -o sim && ./obj_dir/sim
```

Replace the testbench and top-module names to run any other test:

| testbench | what it checks |
|---|---|
| `tb_diff_dff` | the sampling rule, hold between edges |
| `tb_tdc_counter` | counting both edges, freeze by stop, clear, wrap at 128 |
| `tb_fd_ring_osc` | rest state, every node's switching times over 8 loops |
| `tb_fd_aux_chain` | every output against the delayed, inverted input |
| `tb_fd_tdc` | rest code, the example code `000000000011111111111`, 0–10 ns sweep, freeze and clear |
| `tb_sa_ring_osc` | exact held amplitudes, last-node transitions, hold while stopped |
| `tb_sa_tdc` | held amplitudes, count and clear; mid-transition nodes seen by a 3-bit ADC |
| `tb_tdc_prototype` | both TDCs end to end (see below) |

`tb_tdc_prototype` sweeps the fully digital TDC over 0–10 ns in 1 ps steps and
the semi-analog TDC over the same range in 5 ps steps. It checks the
uniqueness of the digital code map and the gain from 3-bit digitisation. It
also counts each mechanism (rest code, counter increments, second-half codes,
freeze, clear, held amplitudes, mid-transition nodes) and fails if any never
occurs.

Every testbench compares against `tdc_ref_pkg`. That package computes the
expected codes from the delay formulas above, independently of the models,
and ends by printing `TB_RESULT checks=N failures=M`.

## Changing the design

* Delays: `T_INV`, `T_NAND` on `fd_tdc`; `T_RISE`, `DT` on `sa_tdc`. If they
  change, the reference functions in `tdc_ref_pkg` must change with them. The
  semi-analog reference assumes that `STEP` divides 500 and `DT` = 1 ps.
* Stage counts and counter widths live in `tdc_pkg`. The ring and chain models
  take their lengths as parameters. The polarity wiring in `fd_tdc` assumes an
  odd number of ring stages.
* To use a different flip-flop resolution rule, or a counter of whole
  periods, change `diff_dff` or `tdc_counter`. The code map and the reference
  move with them.

## Not included

* **The test system**: the Raspberry Pi host, the FPGA, the programmable
  delay module (two SY89296 chips, −10 ns to +10 ns in ≈1 ps steps) and the
  ADC. The testbenches take their place.
* **The analog front end** for the LGAD sensors. It is separate work, and its
  circuit is not described.
* **Radiation hardness, power, and the measured resolution.** The published
  measurements give σ ≲ 20 ps (mean ≈ 10 ps) for the fully digital TDC and
  σ ≲ 10 ps for the semi-analog TDC with 3-bit readout.
  These are properties of the silicon that behavioural models without noise
  cannot reproduce.
