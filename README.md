# Waveform ring-oscillator PUF (wRO-PUF) with a ring-oscillator thermometer

A physically unclonable function (PUF) gives each chip an ID that comes
from manufacturing variation, not from stored data. Ring-oscillator PUFs
usually compare the frequencies of two rings and get one ID bit per pair, so
a long ID needs many rings running for a long time. This design instead
reads the *start-up waveform* of a ring. Two rings start together. One
(RO2) clocks a shift register and the other (RO1) is its data. The pattern
RO2 sees in its first few dozen edges depends on the two rings' exact
timing, so one pair gives a whole word of ID bits. Both rings run near
1 GHz, far faster than the 50–100 MHz system clock, so a 32-bit word is
captured within about two system clocks. After that the rings are switched
off again.

The RTL here covers the device side of that scheme:

* K ring pairs, each with its shift register and output flip-flops;
* a sampling controller that pulses the common ring enable EN;
* the assembly of the device ID from the K per-pair words;
* a third ring (RO3) with two counters, used as an on-chip thermometer. Its
  count tags each reading with the temperature, because the PUF word drifts
  with temperature.

The default build is 12 pairs × 32 bits, a 384-bit ID, with a 50 MHz
system clock.

The rings themselves are combinational loops. On an FPGA they are a NAND
gate plus inverting LUTs, and they have no RTL description as a circuit.
They are therefore given as a behavioural timing model (`ring_osc`). Every
other block is synthesizable RTL.

## How one ring pair turns timing into bits

```
           EN ──┐
     ┌──────────┴─┐  ro1   ┌────┐   ┌────┐         ┌────┐
     │ RO1        ├───────►│D  Q├──►│D  Q├──► ... ►│D  Q│   shift register,
     └────────────┘        │ ^  │ │ │ ^  │ │       │ ^  │   L stages, clocked
     ┌────────────┐  ro2   └─┬──┘ │ └─┬──┘ │       └─┬──┘   by RO2
     │ RO2        ├──────────┴────┼─────┴──┼─────────┘
     └────────────┘               ▼        ▼
                             out[0]     out[1]  ...         output flip-flops
                             (one flip-flop per stage, on the system clock)
```

While EN is 0 both rings are held with their output at 0. When EN rises,
each ring first rises after its own time t (t1 for RO1, t2 for RO2). From
then on it toggles every t, a period of 2t. RO2's n-th rising edge comes at
(2n−1)·t2. At that instant RO1 has toggled ⌊(2n−1)·t2 / t1⌋ times, so the
n-th sample is

    sample(n) = ⌊(2n−1)·t2 / t1⌋ mod 2

Some consequences follow:

* **The first bit tells which ring is faster.** If t1 > t2 the first sample
  is 0. If t1 < t2 (and t2 < 2·t1) it is 1. Taken alone, this first bit is
  the classic ring-oscillator PUF comparison.
* **The rest of the word is a beat pattern.** The sampled stream is a square
  wave at the difference frequency of the two rings. With t1/t2 = 1.2 it
  repeats every 6 samples (`000111000111…`). With t1/t2 = 1.1 it repeats
  every 11 samples. A few percent of timing difference therefore moves
  every edge in the word, and the word carries much more than one bit of
  the pair's timing.
* **On silicon the word is less regular than this formula.** The shift
  register runs far outside normal flip-flop timing, and RO2's clock
  reaches each stage with a different wire delay. Measured words contain
  irregular bits from both effects, and that extra variation adds to the ID.
  The model here is ideal and shows only the beat pattern (see *Limits of
  the ring model*).

After N rising edges of RO2, stage j holds sample N−j: stage 0 holds the
newest sample and stage L−1 the oldest. The output flip-flops copy the
stages on every system clock. `out[j]` is stage j.

## The EN window: what the captured word contains

The shift register shifts as long as RO2 runs, so the word it holds is
**the last L samples before EN fell**. It does not automatically hold the
first L. `sample_ctrl` holds EN high for `EN_CYCLES` system clocks, and the
window is EN_CYCLES × T_clk long. Two rules follow from that:

* The window must hold at least L rising edges of RO2: (2L−1)·t2 < window.
  Otherwise the oldest stages still hold bits from the previous sample. The
  default 2 clocks at 50 MHz (40 ns) holds 36–45 edges for the modelled
  rings (t2 = 0.44–0.56 ns), which is enough for L = 32. At 100 MHz, L = 32
  needs `EN_CYCLES = 4`, while L = 16 fits in 2 clocks.
* The word is the initial L samples only when the window holds exactly L
  edges. A ring's speed is not known to the designer, so this design
  accepts "the last L samples of a fixed window". That is equally repeatable
  from one run to the next: the ID depends on the window, the rings and
  `ro_sel`, and on nothing else.

After EN falls, RO2 makes no more rising edges, so the shift register
freezes. The next system clock edge copies it into the output flip-flops.
`sample_ctrl` waits `SETTLE_CYCLES` (2) clocks and then raises `id_valid`.
One sample takes EN_CYCLES + SETTLE_CYCLES = 4 clocks from the edge that
accepts `puf_start`.

The shift register is clocked by RO2 and the output row by the system
clock. No value crosses between those two clocks while RO2 is running,
because `id_valid` is only raised after RO2 has stopped. Nothing in the
design synchronises the crossing: on hardware, reading `id` before
`id_valid` can give metastable bits.

## The device ID

All pairs share one EN and are sampled together. Pair k's word is ID_k, and
the device ID is their concatenation

    id = {ID_1, ID_2, ..., ID_K}      (ID_1 = pair 0 in the top L bits)

A reading is noisy on silicon. The reference ID of a chip is taken off-chip
as the pattern that occurs most often over many readings (1000 in the
reference measurements). Error correction, or comparison with the stored
reference, belongs to the host. The device only has to make each reading
cheap: one EN pulse, four clocks.

## Ring delay select

Each ring can choose between loop lengths through a small multiplexer that
selects inverter chains of different lengths. The 2-bit `ro_sel` input sets
all rings at once. In the model, setting s adds s × `SEL_STEP_PS` to every
ring's t. Changing the setting changes the ID. The number of settings (4)
and the step (64 ps) are choices of this design.

## Thermometer (RO3 and two counters)

A ring's frequency falls roughly linearly as temperature rises, and a
changed PUF word is expected at another temperature. So each reading is
tagged with a temperature ID from a third ring placed near the PUF:

* a 12-bit counter on the system clock opens a window of 2^12 = 4096
  clocks;
* RO3 runs only during that window (`ro3_en`), and a 16-bit counter clocked
  by RO3 counts its rising edges;
* two clocks after the window closes, RO3 and its counter have stopped, and
  the count is copied to `temp_id` on the system clock; `temp_valid` then
  rises.

At 50 MHz the window lasts 81.92 µs. A 300 MHz RO3 gives about 24 600
counts, in the 16 000–25 000 range seen on the reference hardware, well
inside 16 bits. The counter saturates at 0xFFFF and sets `temp_ovf` rather
than wrapping. A measurement runs once after reset and again on each
`temp_start`; `temp_valid` rises 2^12 + 3 clocks after the accepting edge.

How the 12-bit counter is used (as the window timer) and the gating of RO3
are choices of this design. The widths of the two counters are the
reference values.

## Limits of the ring model

`ring_osc` is noise-free and deterministic. Every ring gets a fixed t, a
stand-in for process variation: a hash of its index spreads t over
440–559 ps. RO1's t is even and RO2's t is odd in picoseconds, so an RO1
transition can never coincide with an RO2 rising edge and no sample is a
tie. This model therefore shows:

* what the logic does with a given pair of ring timings, bit-exactly;
* the beat-pattern structure of the words and how it depends on t1/t2.

It does not show noise, jitter, temperature or voltage dependence,
metastability, or the per-stage wire delays. The reference hardware gets
part of its ID variation from those effects, so the model also cannot give
the reliability, uniqueness or diffusiveness of real devices. The
end-to-end testbench prints the uniformity and the diffusiveness of the
modelled ID only as a sanity figure.

When EN falls, the model drops to 0 at its next scheduled transition (at
most t later), never with a rising edge.

## Departures and open points

* Ring timing, delay-select step and EN sharing across pairs are this
  design's choices. So are the controller's handshake (`start`, `busy`,
  `id_valid`, a start while busy is ignored) and the thermometer's
  sequencing and saturation.
* The captured word is the last L samples of a fixed EN window, not
  necessarily the first L samples after EN rises, which is how the ID of a
  pair is defined for the reference hardware. The two agree when the
  window holds exactly L edges of RO2; see *The EN window*.
* One worked example in the reference material reports 13 differing bits
  between the first 32 bits of the t1/t2 = 1.2 and 1.1 patterns. The ideal
  model gives 14 or 17, depending on how a tie at t = 11·t2 is resolved, so
  that number is not reproduced.
* The thermometer schematic also draws a line from the clock/reset side to
  RO1, with no stated meaning. Here the PUF and the thermometer are started
  separately.
* Not built, because they are host-side functions: the soft processor and PC
  link, the choice of the most frequent pattern, the check of the
  temperature ID against the PUF ID, and error correction.

## Files

| file | contents |
|---|---|
| `rtl/wro_pkg.sv` | default sizes (K=12, L=32, 12/16-bit counters), controller state types |
| `rtl/ring_osc.sv` | behavioural ring oscillator with enable and delay select |
| `rtl/wro_unit.sv` | one pair's RO2-clocked shift register and system-clock output row |
| `rtl/sample_ctrl.sv` | EN pulse generator and `id_valid` |
| `rtl/thermometer.sv` | 12-bit window counter, 16-bit RO3 counter, temperature ID |
| `rtl/wro_puf_top.sv` | the device: controller, K pairs, ID assembly, thermometer |
| `tb/tb_*.sv` | self-checking testbenches, one per block |
| `tb/tb_wro_puf_top.sv` | end-to-end test at the default size (384-bit ID, 50 MHz) |
| `tb/tb_workloads.sv`, `tb/puf_env.sv` | 8×16 at 100 MHz, 8×32 at 50 MHz, 12×32 at 100 MHz |

Top-level parameters: `K`, `L`, `EN_CYCLES`, `SETTLE_CYCLES`, `WIN_BITS`,
`CNT_BITS`, and the model timing `RO_HALF_PS`, `RO_SPREAD_PS`,
`RO3_HALF_PS`, `SEL_STEP_PS`, `SEED`. If you change the system clock or L,
recheck the EN-window rule above.

## Simulating

Every testbench computes its expected values from the ring timing alone. It
does not reuse the design's logic. Each prints `TB_RESULT checks=N
failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_wro_puf_top \
    -y rtl -y tb +libext+.sv rtl/wro_pkg.sv tb/tb_wro_puf_top.sv -o sim
./obj_dir/sim
```

Replace the top module and file name for the other testbenches
(`tb_ring_osc`, `tb_wro_unit`, `tb_sample_ctrl`, `tb_thermometer`,
`tb_workloads`). Each runs in well under a second.

The end-to-end test checks the full 384-bit ID bit for bit, the 4-clock
sample latency, repeat readings, that a start while busy is ignored, all
four delay settings, and two thermometer readings. A slower RO3 must give
the smaller count.

The synthesizable blocks (`wro_unit`, `sample_ctrl`, `thermometer`) can be
linted or synthesized on their own. `wro_puf_top` contains the ring models
and is meant for simulation. For an FPGA build, replace `ring_osc` with the
vendor's LUT-based ring (NAND enable plus inverters), keep the same ports,
and place the rings without routing constraints.
