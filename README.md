# SSM-RDU: a reconfigurable dataflow array with butterfly and scan interconnect

State-space models such as Hyena and Mamba replace attention with two kinds of
long-sequence kernels:
- FFT-based long convolutions (Hyena);
- prefix scans (Mamba).

A reconfigurable dataflow unit (RDU) runs a whole model layer as a spatial
pipeline. Each kernel gets its own compute and memory tiles, and data streams
from tile to tile without going back to DRAM.

The RDU's compute tile is a pipelined SIMD array of functional units. Its
baseline interconnect only supports three patterns:
- element-wise;
- systolic;
- reduction tree.

An FFT or a parallel scan mapped onto that array can use only one pipeline
stage, because the cross-lane links it needs are missing. The fix is to add
fixed cross-lane wiring between pipeline stages, one set per algorithm:
- butterfly links for a radix-2 FFT;
- the link patterns of the Hillis–Steele (HS) scan;
- the link patterns of the Blelloch (B) scan.

A mode register chooses the wiring. The whole dataflow graph of a 16-point FFT
or a 32-element scan is then unrolled over the array. It accepts one new vector
every cycle.

This repository holds SystemVerilog RTL for that design. The parts are:
- a functional unit;
- the mode-dependent cross-lane wiring;
- the compute unit (PCU);
- a memory unit (PMU);
- a tile switch;
- a top level that chains tiles into a streaming pipeline between two DRAM ports.

Every block has a self-checking testbench.

## Sizes

| parameter | default | meaning |
|---|---|---|
| `LANES` | 32 | SIMD lanes per PCU (vector width, 16-bit words) |
| `STAGES` | 12 | pipeline stages per PCU |
| `DEPTH` | 24576 | PMU words of `LANES` x 16 bit (1.5 MB) |
| `NUM_TILES` | 128 | tiles, each one PCU + one PMU + one switch |
| `FRAC_BITS` | 8 | fraction bits of the Q8.8 fixed-point multiply |

The target chip has 520 PCUs of 32 x 12 and 520 PMUs of 1.5 MB, runs at
1.6 GHz, and uses HBM3e at 8 TB/s. `NUM_TILES` defaults to 128 because of the
front ends' memory use. Elaborating a tile costs about 80 MB in Verilator lint
and about 120 MB in the yosys/slang front end. 520 tiles would need 40–60 GB,
while 128 tiles stay well below 32 GB. Set `NUM_TILES = 520` for the full chip;
nothing else changes.

Data are 16-bit signed integers, read as Q8.8 fixed point. A product is
`(a*b) >>> 8`, truncated to 16 bits. All sums wrap modulo 2^16.

## The functional unit (`pcu_fu`)

Each FU has four sources:
- lane input 1 and lane input 2, from the previous stage;
- the stage input, from the FU above in the same stage;
- a 16-bit constant from its configuration.

Each FU has one multiplier, one adder and an accumulator. The configuration
word `fu_cfg_t` (see `ssm_rdu_pkg`) sets the operand muxes:

| operand | choices |
|---|---|
| multiplier A | lane 1, constant |
| multiplier B | stage, lane 2, constant |
| adder A | product, lane 1, constant |
| adder B | accumulator, lane 2, constant, lane 1 |

With these muxes the FU can add or multiply any two of its sources, and a
multiply-add such as `lane1*const + lane2` takes one stage. Other fields of the
configuration word:
- `sub` turns the adder into a subtractor (A − B).
- `acc_en` adds each valid cycle's product into the accumulator, giving a MAC.
  The global `acc_clr` clears every accumulator.

Every output is registered:
- lane output 2 is the product or the sum;
- lane output 1 passes lane input 1 or lane input 2 on unchanged;
- the stage output passes the stage input down to the next FU of the same stage.

A valid bit travels with the data.

## Cross-lane wiring (`pcu_xlane`)

Between stage s−1 and stage s sits a block of wires chosen by the PCU mode.
Nothing in it is clocked or configured per FU. Each lane input 1 or 2 of stage s
is one of:
- the same lane's output 1 or 2 of stage s−1 (straight path);
- output 2 of another lane;
- zero.

The elaboration-time function `xlane_src` in `ssm_rdu_pkg` holds the table. The
block turns it into per-mode wires and one mux per input. All cross-lane links
point toward lane 0: lane `l` receives from lane `l+d`.

**Element-wise and systolic.** Straight paths only.

**Reduction.** A binary tree. At stage s, each lane that is a multiple of 2^s
takes lane `l + 2^(s-1)` on input 2 and its own result on input 1. After
log2(LANES) = 5 stages lane 0 holds the sum of all lanes. Stage 0 is free for a
per-lane multiply, so a dot product takes one pass.

**HS scan.**
- Stages 1..5 add lane `l + 2^(s-1)`, with zero past the last lane.
- Stage 6 shifts everything by one lane and puts zero into the last lane.

The result is an **exclusive** scan in reverse lane order:
`out[l] = x[l+1] + … + x[31]`. Put sequence element i in lane 31−i and lane
31−i returns the sum of elements 0..i−1, which is the exclusive prefix sum.

**B scan.**
- The up-sweep uses the reduction links at stages 1..4.
- The root (lane 0) is cleared to zero on its last up-sweep step.
- A down-sweep at stages 5..9 uses distance `d = 2^(9-s)`. The parent lane `l`
  computes `own + lane(l+d)`, and the child lane `l+d` takes the parent's old
  value.

The result is the same exclusive scan in the same lane order as the HS scan, in
10 stages instead of 7.

### FFT mode: the part worth reading slowly

The array computes a 16-point complex FFT at 32 x 12. Complex element `e` sits
in lanes `2e` (real part) and `2e+1` (imaginary part). Each radix-2 step takes
three PCU stages:

1. Stage 3t is the twiddle product, part 1. Lane input 1 is this lane's own
   part of the element and lane input 2 is the other part. The FU puts
   `wr * own` (constant = wr) on output 2 and passes the other part on output 1.
2. Stage 3t+1 is the twiddle product, part 2: `other * const + prev`.
   - On the real lane the constant is `-wi`, giving `wr*xr - wi*xi`.
   - On the imaginary lane it is `+wi`, giving `wr*xi + wi*xr`.
3. Stage 3t+2 is the butterfly. Even element positions add their partner two
   lanes away (the next element). Odd positions subtract: `partner − own`.

So four radix steps fill exactly 12 stages and 32 lanes.

The links between radix steps follow a **constant-geometry** schedule. Every
butterfly pairs neighbouring elements (position 2k with 2k+1). The gather into
stage 3t, for t ≥ 1, reads element `rotl1(e)`, a one-bit left rotation of the
4-bit position. Thanks to this, every radix step uses the same short links, and
only the twiddle constants change from step to step.

Configure the twiddles like this:
- at radix step t, an odd position `pos` uses `w = exp(-2πi·j/2^(t+1))`, where
  `i = rotl(pos, t)` and `j = i mod 2^t`;
- even positions use w = 1.

The testbenches compute these constants with `$cos`/`$sin` and write them into
the FU constants over the configuration port.

Data ordering:
- **Input:** position `pos` must hold `x[bitrev(pos)]`, which is the usual
  decimation-in-time order.
- **Output:** position `pos` holds `X[rotr1(pos)]`. For 4 points this gives
  X0, X2, X1, X3, i.e. bit-reversed order.

With `LANES = 8, STAGES = 6` the same wiring gives the 4-point FFT. Its second
gather is the swap of elements 1 and 2.

Each FU multiply truncates to Q8. A 16-point transform of inputs in ±100
therefore matches a floating-point DFT to within about ±24.

A longer FFT uses Bailey's four-step method:
1. R-point FFTs of 16 points on the PCU;
2. twiddle multiplies (element-wise mode);
3. a transpose through PMU strided reads;
4. a second round of 16-point FFTs.

The RTL provides the pieces. It has no sequencer that runs the four steps
automatically.

### Systolic mode

Operand A moves along the lanes (lane output 1 passes lane input 1). Operand B
moves down each stage through the stage inputs, entering at lane 0 of every
stage through `stage_in[s]`. Each FU multiplies the two and accumulates, so
FU (s, l) ends up holding one element of a matrix product (output stationary).
The accumulators are read by reconfiguring the FUs, or, in simulation, through
the hierarchy.

## The PCU (`pcu`)

The PCU is a `LANES x STAGES` grid of FUs with one `pcu_xlane` in front of each
stage and a mode register. Interface summary:
- `cfg_we / cfg_stage / cfg_lane / cfg_data` write one FU's `fu_cfg_t`;
- `mode_we / mode_in` set the mode;
- vectors enter on `in_v1`, `in_v2` with `in_valid`;
- they leave `STAGES` cycles later on `out_v1`, `out_v2` with `out_valid`.

The PCU accepts a vector every cycle with no stalls. The mode can change between
bursts. After a change the wiring acts at once on everything still in the pipe,
so drain the pipe first.

## Memory unit (`pmu`)

The PMU is a scratchpad of `DEPTH` words, each one vector wide, with:
- a streaming write port;
- a patterned streaming read port.

It has four registers:

| register | effect |
|---|---|
| `WBASE` | restarts the write pointer (writes then auto-increment) |
| `RBASE` | first read address |
| `STRIDE` | read address step |
| `START` | starts a read of N words |

Read timing: addresses issue one per cycle from the cycle after `START`, and
data come one cycle later, as in a synchronous-read SRAM. Addresses wrap at
`DEPTH`.

The strided read is what a tiled FFT needs for its column walks. The design
has no more elaborate address generator.

## Switch (`noc_switch`) and tile (`rdu_tile`)

The switch is a statically configured crossbar. Each output has a select
register naming the input it copies, and any select ≥ N_IN disconnects it.
Properties:
- one input may feed several outputs (multicast);
- the outputs are registered, so a hop costs one cycle;
- there is no flow control.

A tile joins one switch, one PMU and one PCU.

| switch side | ports |
|---|---|
| inputs | previous tile (`CHAIN`), PMU read stream (`PMU`), PCU result (`PCU`) |
| outputs | PMU write (`PMU`), PCU lane inputs 1 (`PCU1`), PCU lane inputs 2 (`PCU2`), next tile (`CHAIN`) |

How the PCU connects inside the tile:
- it starts on the valid of its `PCU2` input;
- its stage inputs come from the words of the `PCU1` vector (word s feeds stage s);
- its result is lane outputs 2 of the last stage.

Examples of what a tile can be set to:
- a bypass (`CHAIN` ← `CHAIN`);
- a store (`PMU` ← `CHAIN`);
- a source (`CHAIN` ← `PMU`);
- a compute stage (`PCU2` ← `CHAIN`, `CHAIN` ← `PCU`);
- a compute stage whose second operand comes from its own PMU (`PCU1` ← `PMU`).

## The top (`ssm_rdu`)

The top chains `NUM_TILES` tiles. The DRAM input stream enters tile 0, and the
last tile's chain output is the DRAM output stream. Configuration uses a single
write bus with these fields:
- `cfg_tile`, which selects the tile;
- `cfg_unit`: FU, mode, PMU register or switch select;
- `cfg_addr`, which is `{stage, lane}` for an FU with the lane in the low
  log2(LANES) bits;
- `cfg_data`.

A fused layer maps onto consecutive tiles. Two examples:
- **Hyena-style:** FFT on one tile, multiply by the filter spectrum on the next,
  inverse FFT on a third.
- **Mamba-style:** scans.

Once configured, a stream runs through all of them at one vector per cycle.
Latency is one cycle per switch hop, 12 cycles per PCU and one cycle per PMU
read.

## Where this design departs from the target chip

- **One PCU with all modes.** The target evaluates separate FFT-mode, HS-scan
  and B-scan PCU variants. Here one PCU has all the wiring, chosen by a mode
  register, and each mode adds one input to the per-lane muxes.
- **A chain, not a grid.** The RDU is a 2-D grid of PCUs and PMUs joined by a
  network of switches. Here the tiles form a 1-D chain with a fixed three-input,
  four-output switch per tile. That is enough to stream fused kernels from
  tile to tile, but not to route arbitrary graphs.
- **FFT output order.** The array's 4-point mapping is drawn with its outputs
  numbered 1..4 as if in natural order. The wiring here (links between adjacent
  elements only, one fixed permutation between radix steps) gives bit-reversed
  output for 4 points and `X[rotr1(pos)]` in general. Reordering is left to the
  PMU that stores the result.
- **Link direction.** Scans and reductions run toward lane 0, so a sequence must
  be loaded in reverse lane order.
- **Own choices, not specified by the target:**
  - the fixed-point format;
  - the FU's exact operand muxes and subtract bit;
  - the PMU address generator;
  - the switch;
  - the configuration bus;
  - the valid-only streaming (no backpressure);
  - asynchronous reset.
- **Not built:**
  - HBM/DRAM (the top has stream ports instead);
  - clocking;
  - the compiler and mapper that would produce a configuration;
  - a sequencer for multi-pass kernels;
  - a carry path between 32-element scan chunks of a long sequence (done by
    another pass).

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself with a
watchdog.

| testbench | what it checks |
|---|---|
| `tb_pcu_fu` | every mux setting, add/sub, Q8 multiply, MAC with clear, pipeline registers, against a model |
| `tb_pcu_xlane` | the wiring of every mode at 8 lanes against link tables written by hand from the algorithms |
| `tb_pcu` | the 32 x 12 PCU in all six modes with mode switches; 12-cycle latency and back-to-back output |
| `tb_pmu` | the full 1.5 MB PMU: unit-stride and strided reads, wrap-around, read timing |
| `tb_noc_switch` | random routes, multicast, disconnect, one-cycle hop |
| `tb_ssm_rdu` | three tiles end to end (see below) |

`tb_pcu` covers these modes:
- element-wise multiply;
- dot product by reduction;
- HS and B exclusive scans;
- 16-point FFT against a direct DFT;
- systolic matrix product.

`tb_ssm_rdu` runs three tiles with small PMUs and full-size PCUs:
1. A Hyena-style fused FFT. Filter taps are loaded into PMU 1 through tile 0's
   bypass, and the signal into PMU 0. Then PMU 0 → PCU 0 (FFT) → PCU 1
   (multiply by the taps streamed from PMU 1) → tile 2 bypass → DRAM.
2. After reconfiguration, a scan chain: PMU 0 strided read → HS scan → B scan →
   reduction → DRAM.

A monitor counts PMU writes, strided reads, bypass hops, multicast, mode
switches and vectors per PCU mode. It flags any mechanism that never occurred.

The largest simulated configuration is three tiles with full 32 x 12 PCUs.
There is no test of the top at its default 128 tiles with full-size PMUs.
Elaborating that many tiles takes several GB and tens of minutes, and the chain
adds nothing per tile that the three-tile test does not exercise.

Run a testbench with plain Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/ssm_rdu_pkg.sv rtl/pcu_fu.sv rtl/pcu_xlane.sv rtl/pcu.sv rtl/pmu.sv \
  rtl/noc_switch.sv rtl/rdu_tile.sv rtl/ssm_rdu.sv tb/tb_ssm_rdu.sv \
  --top-module tb_ssm_rdu -o sim && obj_dir/sim
```

For the smaller blocks, list only the package, the block and its submodules.
