# Cluster-finding trigger for a two-plane scintillating-fibre detector

This is synthesizable SystemVerilog for the first-level trigger of the fibre
detector in the electron arm of the Kaos spectrometer at MAMI (Mainz). The
trigger was published by Achenbach et al. in "A Large-Scale FPGA-Based Trigger
and Dead-Time Free DAQ System for the Kaos Spectrometer at MAMI". The RTL
follows that description. Where the publication is silent, this design makes
its own choices, and the text below marks them.

## The problem

The detector has two vertical planes, called *x* and *theta*. Each plane has
2304 read-out channels. One channel is a slanted column of four fibres read by
a multi-anode photomultiplier. The planes sit close to the beam, so most
signals are background, mainly Møller electrons. Raw rates above 1 MHz per
plane were measured.

A real particle crosses the slanted columns at an angle. It therefore fires a
small group of *neighbouring* channels at almost the same time. That group is
the **cluster**. Background tends to give single hits, after-pulses or very
wide clusters, because it hits the plane at large angles.

The trigger uses this in three steps:

1. It accepts only clusters whose size lies within programmable bounds
   (3 to 5 channels).
2. It requires a cluster in both planes at the same time.
3. Optionally, it requires that the pair of positions is an allowed track,
   using a binary acceptance matrix that was computed off-line.

The design has no event buffering anywhere. Every decision is a fixed-latency
pipeline, so the trigger adds no dead time.

## Architecture: 37 modules in four stages

In the original system every module is a separate VME logic board (Vuprom)
with a Virtex-4 FPGA. The boards are linked by 32-channel VHDCI cables. Here
each board is one SystemVerilog module, and each cable is a 32-bit bus.

```
 x plane   2304 ch ─► 12 × stage1_module ──────────────(12 × 32)──────┐
                                                                      ├─► 6 × coincidence_module ─(6 × 32)─► output_module ─► flt
 θ plane   2304 ch ─► 12 × stage1_module ─(12 × 32)─► 6 × reduction_module ─(6 × 32)┘
```

| stage | module | count | input | output |
|---|---|---|---|---|
| 1 first stage | `stage1_module` | 12 per plane | 192 channels (6 cables) | 32 bits, 6 channels per bit |
| 2 reduction (θ only) | `reduction_module` | 6 | 64 bits (2 first-stage modules) | 32 bits, 12 channels per bit |
| 3 coincidence | `coincidence_module` | 6 | 64 x bits and 128 θ bits | 32 bits |
| 4 output | `output_module` | 1 | 6 × 32 bits | first-level trigger `flt` |

Coincidence module *c* handles the x channels 384c … 384c+383. It reads x
first-stage modules 2c and 2c+1. For θ it reads four consecutive reduction
modules, starting at `THETA_BASE[c]`, which is 1536 θ channels.

The publication fixes the size of the θ window but not where it sits. The
default table `{0,0,1,2,2,2}` is this design's choice. It keeps each window
roughly centred on the x range. Change it to match the detector's real
correlation between x and θ.

### Inside every module

Every module starts with a **gate generator** and contains a **trigger
controller** (its register file). Every module also has an **OR** of its
output bus, which drives a monitor output and a **rate counter**.

Between these sit the stage-specific units:

- **Stage 1:** channel mapping → gate generator → cluster finder → 6:1 OR
  reduction → pulse-width discriminator (PWD). A parallel raw path runs gate
  generator → 6:1 OR reduction. A multiplexer selects clusters or raw, and a
  programmable delay follows.
- **Reduction stage:** a 2:1 OR reduction.
- **Coincidence stage:** five units run in parallel, and a multiplexer picks
  one of them:
  - 6:1 OR of all inputs
  - x AND θ
  - 2:1 OR of x
  - 4:1 OR of θ
  - the acceptance matrix
- **Output stage:** 6:1 OR reduction then a single OR, in parallel with x AND
  θ. A multiplexer selects which one becomes `flt`.

This is the block structure of the published stage diagrams. The wiring
between blocks follows the arrows printed there.

## Signal timing: gates and the pulse-width discriminator

This is the least obvious part of the design. Everything is synchronous to one
clock `clk`. A 400 MHz target (2.5 ns) is assumed, because the publication
gives only that the FPGA is "capable of 400 MHz".

**Gate generator** (`gate_generator`). Each discriminator input is
asynchronous and is sampled once. A rising edge loads a down-counter with the
`GATE_WIDTH` register, and the output stays high while the counter is
non-zero.

- The output rises 2 clocks after the input edge.
- It lasts exactly `GATE_WIDTH` clocks after the *last* edge, so the gate is
  retriggerable.
- A long input pulse therefore gives a gate of fixed length. A pulse shorter
  than a clock is caught if it is sampled.

Each stage regenerates the gates. This sets the coincidence window between
signals that arrive at slightly different times. For example, x and θ reach
the coincidence stage 3 clocks apart, because θ passes the extra reduction
stage. The 8-clock gates still overlap for 5 clocks.

**Cluster finder** (`cluster_finder`). It is combinational logic plus one
register, so it sees the *gates*, not the raw pulses. When the channels of a
real cluster fire a few ns apart, their gates overlap for most of
`GATE_WIDTH`. A cluster that only forms through a brief chance overlap gives a
very short output pulse.

**PWD** (`pwd`). The PWD removes those short pulses. It ANDs each signal with
a copy delayed by `PWD_DELAY` clocks, so a pulse of L clocks leaves
max(L − `PWD_DELAY`, 0) clocks.

With the reset values (gate 8, PWD 2), a good cluster gives a 6-clock output
pulse, and a 1- or 2-clock overlap gives nothing. This is how the published
system avoids fake clusters from asynchronous signals.

## Cluster finding

For every channel *c* of a module, and for every size n = 3, 4, 5, there is
an AND of n consecutive channels. The window starts at c − ⌊(n−1)/2⌋ and the
AND also takes the inverted channel just below and just above the window:

| n | active channels | must be inactive |
|---|---|---|
| 3 | c−1 … c+1 | c−2, c+2 |
| 4 | c−1 … c+2 | c−2, c+3 |
| 5 | c−2 … c+2 | c−3, c+3 |

These are the windows of the published gate diagram for one output.

- Each size is enabled when `CLUSTER_MIN ≤ n ≤ CLUSTER_MAX`.
- The enabled sizes are ORed into output bit *c*.
- A cluster of exactly n channels is therefore reported once, at its centre
  (lower-middle channel for even n).
- Wider or narrower clusters are rejected.
- Channels beyond the edge of the module count as inactive. A cluster that
  crosses the boundary between two first-stage modules is lost. The
  publication does not say how its boundaries behave.

The hardware range 3 to 5 is set by the `SMIN`/`SMAX` parameters. The bounds
narrow it at run time.

## Position resolution and the acceptance matrix

The 6:1 reduction in stage 1 makes one bit per 6 channels. For θ, the further
2:1 reduction makes one bit per 12 channels. These are the published
resolutions of the acceptance test: 6 channels (4.98 mm) in x and 12 channels
(9.96 mm) in θ.

A coincidence module therefore sees 64 x bins and 128 θ bins. Its matrix has
64 × 128 = 8192 bits, held in flip-flops and cleared at reset.

x bin *i* is accepted when both of these hold:

- `x[i]` is hit.
- Some hit θ bin *j* has `M[i][j] = 1`.

The 64 accepted-x flags are folded pairwise onto the 32-bit output, so bit k
means x bin 2k or 2k+1 was accepted. This output format is this design's
choice.

**Loading the matrix.** Write word *w* of row *i* to table index
`i*4 + w`, that is, bus address `0x1000 + i*4 + w`. Bit *b* of that word is θ
bin `32*w + b`.

**Bin numbering.** For x channel X (0 … 2303):

- module c = X / 384
- bin = ((X/192) mod 2)·32 + (X mod 192)/6

For θ channel T:

- reduction module r = T / 384
- bit = (((T/192) mod 2)·32 + (T mod 192)/6)/2
- bin in module c = (r − `THETA_BASE[c]`)·32 + bit

## Selecting the trigger type

Register `MUX_SEL` in each stage chooses the trigger type. The trigger types
measured in the beam tests map as follows:

| trigger | stage 1 | coincidence stage | output stage |
|---|---|---|---|
| raw signals | 0 raw | 0 (6:1) | 0 OR |
| clusters in one plane | 1 clusters | 2 (x) or 3 (θ) | 0 OR |
| x OR θ | 1 | 0 (6:1) | 0 OR |
| x AND θ, any position | 1 | 1 (x AND θ, bit 0) | 0 OR |
| x AND θ in the output stage | 1 | 2 in modules carrying x, 3 in the others | 1 (x AND θ), with `X_MASK` marking the x cables |
| tracks in the acceptance matrix (reset setting) | 1 | 4 (matrix) | 0 OR |

The publication does not say how the output stage tells x inputs from θ
inputs. Here a 6-bit mask `X_MASK` does it: bit i set means cable i carries x
data.

## Configuration bus and register map

VME is not modelled. Each module has a synchronous, word-addressed port:

- `cfg_we`, `cfg_addr[15:0]` and `cfg_wdata[31:0]` carry writes, which land on
  the next clock edge.
- `cfg_rdata` is a combinational read.

At the top level, `cfg_sel` selects the module:

| `cfg_sel` | modules |
|---|---|
| 0–11 | x first stage |
| 12–23 | θ first stage |
| 24–29 | reduction |
| 30–35 | coincidence |
| 36 | output |

This numbering stands in for the boards' VME address switches.

| address | register | reset | used by |
|---|---|---|---|
| 0x0000 | `GATE_WIDTH` (clocks, 0 = off) | 8 | all |
| 0x0001 | `CLUSTER_MIN` | 3 | stage 1 |
| 0x0002 | `CLUSTER_MAX` | 5 | stage 1 |
| 0x0003 | `PWD_DELAY` (0–15) | 2 | stage 1 |
| 0x0004 | `MUX_SEL` | 1 / 0 / 4 / 0 for stages 1–4 | stages 1, 3, 4 |
| 0x0005 | `OUT_DELAY` (0–31) | 0 | stage 1 |
| 0x0006 | `RATE_WINDOW` (clocks) | 400 000 000 (1 s) | all |
| 0x0007 | `X_MASK` | 0x07 | output |
| 0x0010 | rate: rising edges of the OR output in the last window (read only) | | all |
| 0x0011 | total rising edges since reset (read only) | | all |
| 0x0012 | module id (read only) | | all |
| 0x1000+i | table entry i: channel map (stage 1) or matrix word (coincidence) | | |

**Channel map.** Table entry *o* of a first-stage module holds the input
channel that feeds geometric channel *o*. It resets to the identity. The
actual anode-to-fibre map of the detector is not published, so it has to be
loaded.

All reset values and the register map are this design's choices. The
publication only states that the trigger parameters and cluster-size bounds
are set on-line via VME.

## Latency

All latencies are fixed, with no event-by-event variation, as in the
published system. In clocks from a module's input to its output, with reset
settings:

| stage | this RTL | at 400 MHz | published (includes I/O and cables) |
|---|---|---|---|
| first stage, clusters | 8 + `PWD_DELAY` + `OUT_DELAY` (10) | 25 ns | 68 ns |
| first stage, raw | 6 + `OUT_DELAY` | 15 ns | — |
| reduction | 3 | 7.5 ns | 22 ns |
| coincidence | 4 (reductions, x AND θ), 5 (matrix) | 10 / 12.5 ns | 23–30 ns, depending on trigger type |
| output | 5 (OR), 4 (x AND θ) | 12.5 / 10 ns | 30 ns |

For the whole system, a track present in both planes at the same instant
raises `flt` 23 clocks later (57.5 ns), using the matrix trigger.

The published numbers are measured board latencies. They include input and
output buffers, LVDS receivers and cables, which are not part of this RTL.
`OUT_DELAY` can add up to 31 clocks per first-stage module to align planes or
to match a required latency. As in the published system, the matrix condition
costs extra time compared with the position-independent coincidence, but
here the extra time is 1 clock rather than about 7 ns.

## What is not here

These parts of the publication are not logic of this trigger, so no RTL is
given for them:

- analog front-end boards and the double-threshold discriminators
- the board infrastructure: VME interface, CPLD, configuration flash, DSP
- the COMPASS trigger-distribution system (TCS), a laser and optical network
- the F1 TDCs and CATCH read-out drivers, S-LINK and read-out PCs
- the DAQ software

The outputs and the configuration port of `kaos_trigger` are where those parts
would connect. The planned kinematic (missing-mass) trigger with the hadron arm
is not described in enough detail to build. The debugging cable of the first
stage is represented only by the `or_mon` monitor outputs.

## Files

| file | content |
|---|---|
| `rtl/kaos_pkg.sv` | widths, register map, reset values, select encodings |
| `rtl/kaos_trigger.sv` | top: 37 modules, configuration decode |
| `rtl/stage1_module.sv`, `reduction_module.sv`, `coincidence_module.sv`, `output_module.sv` | the four board types |
| `rtl/channel_mapping.sv`, `gate_generator.sv`, `cluster_finder.sv`, `or_reduction.sv`, `pwd.sv`, `bus_mux.sv`, `delay_line.sv`, `or_unit.sv`, `rate_counter.sv`, `trigger_controller.sv`, `x_theta_coincidence.sv`, `coincidence_matrix.sv` | functional units |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

Every testbench ends with a line `TB_RESULT checks=N failures=M` and has a
watchdog.

- The unit testbenches compare the module with a model written independently,
  for example run-length cluster search and a history buffer for the PWD.
- `tb_kaos_trigger` runs the complete 37-module system at full size (2 × 2304
  channels). It injects tracks, checks the trigger and its 23-clock latency,
  and makes each mechanism happen at least once: matrix accept and reject,
  single plane, size reject, PWD suppression, raw mode, output delay, both
  x AND θ modes, and the trigger count.

`tb_beam_rates` runs a beam-test-like workload on the full system. It uses a
synthetic stream of single hits, wide clusters, one-plane clusters, real tracks
and random cluster pairs outside the acceptance. It runs the stream three
times:

1. raw mode
2. clusters with the matrix
3. x OR θ

It reads the modules' counters over the bus and requires them to equal the
injected event counts exactly. The events are spaced so that they never pile
up. It prints the resulting rate reductions.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_kaos_trigger \
    -y rtl -y tb +libext+.sv -Irtl rtl/kaos_pkg.sv tb/tb_kaos_trigger.sv -o sim
./obj_dir/sim
```

Replace `tb_kaos_trigger` with any other `tb_<module>` to run that module's
testbench. The full-system test builds in about half a minute and runs in a
few seconds.

`kaos_trigger` takes the parameters `NCH`, which must be 2304 because the
37-module wiring needs 12 first-stage modules per plane, and `THETA_BASE`.

## How far to trust it

- **Follows the publication:** the stage structure, the channel, cable and
  module counts, the cluster logic, the PWD principle, the OR reductions with
  their ratios, the acceptance-matrix principle and its resolutions, and the
  set of units and multiplexer choices in each stage.
- **This design's own:** everything clocked (the clock rate, all latencies in
  clocks, and the gate generator as a retriggerable one-shot), the delay and
  rate-counter implementations, the register map, the matrix output format,
  the θ window table, `X_MASK`, and the treatment of module edges.
- **Checked:** each unit against an independent model, and the whole system
  end to end at full size.
- **Not checked:** timing closure at 400 MHz on a real FPGA, and behaviour
  with the real detector maps.
