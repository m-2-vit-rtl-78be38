# M2-ViT accelerator: SystemVerilog model of a mixed-quantisation engine for hybrid vision transformers

Hybrid vision transformers such as EfficientViT mix two kinds of layers.
Depthwise convolutions (DWConvs) do little arithmetic per byte fetched, so
they are limited by memory. Pointwise convolutions (PWConvs) and the matrix
multiplications (MatMuls) of linear attention are limited by arithmetic.
M2-ViT quantises the weights of each kind differently (activations stay 8-bit
unsigned throughout):

* **DWConv weights: 4 bits**, one scale per filter. This halves the weight
  traffic of the memory-bound layers.
* **PWConv / MatMul weights: one of two schemes per filter.** Filters whose
  weights look uniformly spread keep 8-bit uniform quantisation. Filters whose
  weights are bell-shaped use additive power-of-two (APoT) quantisation,
  `W = s * (2^p1 + 2^p2)`, where both exponents are less than or equal to 0.
  A multiply by an APoT weight is two shifts and an add. The scheme of each
  filter is chosen offline by minimum squared error, with half the filters of
  each layer in each scheme.

The hardware has three kinds of work to do: 4-bit DWConvs, 8-bit uniform
PWConvs and APoT PWConvs. It handles them with two engines in each core:

* the **MPMA** (Mixed-Precision Multiplication Array) of 4-bit x 8-bit
  multipliers, which runs DWConvs in *single mode* and 8-bit PWConvs in
  *merged mode*;
* the **SAT** (Shifters and Adder Tree), which runs the APoT filters of a
  PWConv at the same time as the MPMA runs its uniform filters.

This repository holds RTL for the whole accelerator at the size the design
was evaluated at: 16 cores, each with `R x M x T = 3 x 3 x 16` multipliers and
`N x S = 9 x 8` shifter units. It also holds a self-checking testbench for
every module.

## Organisation

```
m2vit_top
 ├─ global_controller     instruction queue, loop nests, buffer read addresses
 ├─ input_buffer          16 banks, one per core (each core runs its own batch element)
 ├─ weight_buffer (x2)    uniform/4-bit weights (576-bit words), APoT weights (504-bit words)
 └─ computing_core (x16)
     ├─ core_controller   aligns control with buffer data, selects columns / vectors
     ├─ mpma              16 tiles x 3 PE blocks (mpma_block) x 3 multipliers (ps_mul)
     ├─ sat               8 tiles (sat_tile) x 9 shifter units (shifter_unit) + adder tree
     └─ aux_buffer        requantised results, read out through the top
```

All 16 cores execute the same instruction in lockstep. The weight words are
broadcast to every core; each core reads its own input-buffer bank. The
configuration constants are in `rtl/m2vit_pkg.sv`.

## MPMA single mode: depthwise 3x3 convolution

This is the hardest part of the design to picture. The dataflow is *output
parallel*:

* **Multipliers.** The 3 multipliers of a PE block take the 3 rows of one
  kernel column. The block's register therefore completes one 3x3 output
  pixel of one channel in 3 cycles, one cycle per kernel column `kx`.
* **Blocks.** The 3 blocks of a tile work on 3 different channels.
* **Tiles.** The 16 tiles work on 16 horizontally adjacent output pixels. All
  tiles receive the same weights (broadcast).

Output pixel `t` needs input columns `t`, `t+1` and `t+2`. So at kernel
column `kx`, tile `t` must hold input column `t + kx`. The tiles form a shift
register of input columns, where one column is 3 rows x 3 channels = 9 bytes:

| cycle (kx) | tile 0 | tile 1 | ... | tile 15 | action                                     |
|-----------:|:------:|:------:|:---:|:-------:|--------------------------------------------|
| 0          | col 0  | col 1  |     | col 15  | *load*: all tiles in parallel              |
| 1          | col 1  | col 2  |     | col 16  | *shift*: tile t takes tile t+1's column, col 16 enters tile 15 |
| 2          | col 2  | col 3  |     | col 17  | *shift*: col 17 enters tile 15             |

The 18 columns of one group of 16 output pixels sit in one input-buffer
word. The word is read once per group, and the shift register supplies the
columns that neighbouring windows share. One group produces 16 pixels x 3
channels in 3 cycles, with all 144 multipliers busy in every cycle.

## MPMA merged mode: 8-bit pointwise convolution

In merged mode, tiles `2p` and `2p+1` form a pair that computes one filter.
The dataflow is *filters parallel*:

* Every multiplier in both tiles of a pair sees the same 9 input channels of
  one pixel. The input vector is broadcast to all pairs.
* Tile `2p` multiplies by the low nibble of each 8-bit weight, read as
  unsigned.
* Tile `2p+1` multiplies by the high nibble, read as signed.

Each block accumulates along the input channels. The pair's result is
`sum over blocks of (REG_high * 16 + REG_low)`, which is the exact 8x8
product sum. Eight pairs give 8 filters x 9 channels per cycle.

The `ps_mul` multiplier can read its 4-bit weight as signed or unsigned.
This is what makes the two halves recombine exactly.

## SAT: APoT filters

The SAT has 8 tiles of 9 shifter units. A shifter unit computes
`A * s * (2^p1 + 2^p2)` with two right shifts and one add:

* The APoT code is 7 bits: `{sign, |p1|, |p2|}`, with `p` in [-7, 0].
* To keep the shifts exact, the activation is first widened by 7 fraction
  bits. The unit's output is therefore `A * W * 2^7`, an integer.

Each tile sums its 9 units in an adder tree and accumulates across input
channel groups. It works on a different filter than the other tiles, and the
input vector is broadcast to all tiles.

In a PWConv instruction the SAT receives the same 9-channel vector as the
MPMA, in the same cycle. Each step therefore advances 8 uniform and 8 APoT
filters together: 72 MACs per cycle on each engine. This matches the 1:1
split of filters between the two schemes.

## Instructions and data layout

A PWConv instruction is one *filter group* of 8 uniform plus 8 APoT filters,
repeated. MatMuls run as PWConvs, with tokens as pixels. The operand that
plays the weight role must be placed in the weight buffers.

`instr_t` (see `m2vit_pkg.sv`) has these fields:

* `op`, the operation;
* three loop counts;
* base addresses for the input, uniform-weight, APoT-weight and output data;
* an input stride, in words per pixel;
* two requantisation shifts, one for each engine.

The controller issues one step per cycle, with no stalls. After each
instruction it spends 4 drain cycles. The loop nests and layouts are these:

| | DWConv (`OP_DW`) | PWConv / MatMul (`OP_PW`) |
|---|---|---|
| loops | `o < n_outer` channel groups of 3, `md < n_mid` words, `kx < 3` | `o < n_outer` filter groups, `md < n_mid` pixels, `c < n_inner` groups of 9 input channels |
| input word | `in_base + o*n_mid + md`: 18 columns; byte `(x*3+m)*3+r` is column x, channel m, row r | `in_base + md*in_stride + c/18`; vector `c%18` holds channels `9c..9c+8`, byte `s*9+i` |
| weight word | `wu_base + 3*o + kx`; nibble `m*3+r` is channel m, row r, column kx (signed) | uniform `wu_base + o*n_inner + c`, byte `p*9+i`; APoT `wa_base + o*n_inner + c`, 7-bit field `p*9+i` |
| result word | `out_base + o*n_mid + md`; byte `t*3+m` is output pixel t, channel m | `out_base + o*n_mid + md`; bytes 0..7 uniform filters, 8..15 APoT filters |

The off-chip side is responsible for arranging the data. It:

* writes overlapping three-row strips for DWConvs;
* pads the channel count to a multiple of 9;
* reads the results back.

Results are requantised to 8 bits on write-back:
`clip((acc + 2^(sh-1)) >> sh, 0, 255)`. The shift is arithmetic.

Timing of one core:

* A step's buffer data arrives one cycle after the step is issued.
* The engines register their inputs, then accumulate.
* A result is written to the auxiliary buffer three cycles after the step that
  carried `last`.
* The run time of an instruction is its number of steps plus 4.

## What follows the paper, and what this design chose

From the paper:

* the core contents: local controller, MPMA, SAT and auxiliary buffer;
* the array sizes: R=3, M=3, T=16, N=9, S=8, L=16;
* the three global buffers;
* both MPMA dataflows: output-parallel DWConv with the column shift chain and
  weight broadcast, and filters-parallel merged mode with the low/high tile
  pairing;
* the shifter unit made of two shifters and an adder, and the SAT
  filters-parallel dataflow;
* 4-bit DWConv weights, 8-bit uniform weights and APoT weights;
* parallel uniform and APoT execution of a PWConv.

This design's own choices, because the paper does not give them:

* signed weights with zero point 0, and unsigned activations;
* the APoT code and its exponent range;
* accumulator widths of 24 bits (MPMA) and 32 bits (SAT);
* the register stages;
* buffer sizes (256 words each), word layouts and banking;
* the instruction format and loop nests;
* requantisation, with the activation zero point taken as 0;
* the read-out port.

The figure of the merged mode labels the accumulator `>> 4bit`. Here the
high-nibble sums are weighted by 2^4, which is what the arithmetic requires.
The paper's equation for a shift multiply writes `A >> p`. Here the
activation is widened by 7 fraction bits so that no bits are lost.

Not built:

* **Inter-engine pipelining.** The paper streams SAT outputs straight into
  the MPMA for consecutive MatMuls, and DWConv outputs straight into the SAT
  for the following PWConv. This RTL runs one instruction at a time, and
  results go through the auxiliary buffer and the off-chip side.
* **Other convolution shapes.** Only 3x3 kernels at stride 1 are supported.
  EfficientViT's 5x5 depthwise aggregation and its stride-2 DWConvs are not.
* **Off-chip traffic.** Layers larger than the buffers must be tiled by the
  off-chip side. The DRAM and its controller are not part of the RTL. For
  example, the largest EfficientViT-B1 PWConv has 131 KB of uniform weights,
  against an 18 KB uniform weight buffer.

The array's peak rate is 16 cores x 144 MACs/cycle = 2.3 TOPS at 500 MHz.
The paper reports 2,150 GOPS for its implementation.

## Verification and simulation

Every module in `rtl/` has a testbench `tb/tb_<module>.sv`. Each testbench
computes its expected values independently of the RTL: exhaustive integer or
real arithmetic for the multiplier and the shifter unit, and direct
convolutions and dot products for the arrays and the core. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

`tb_m2vit_top` runs the full-size design (16 cores) through three
instructions: a DWConv, a mixed PWConv and a PWConv whose pixels span two
input words. It compares every core's results and checks the cycle count. It
also checks that each mechanism happened at least once: parallel load, shift,
both modes, SAT, clipping at both ends, and two-word pixels.

`tb_mbconv_workload` runs a slice of a real layer at full size. It takes one
inverted-residual block of EfficientViT-B1 stage 3 (64 channels expanded to
256). It runs the 3x3 depthwise convolution over 126 of the 256 channels,
then the complete expanding pointwise convolution (64 channels padded to 72,
256 filters) for 8 pixels per core. Both fit in one fill of the buffers, and
the test takes 1,410 cycles.

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/m2vit_pkg.sv tb/tb_m2vit_top.sv \
          --top-module tb_m2vit_top -Mdir obj && obj/Vtb_m2vit_top
```

The full-size top takes about a minute to build and well under a second to
run.
