# FlexBlock core: a multi-precision block-floating-point training datapath

Training a DNN in block floating point (BFP) means storing each tensor as
small integers that share one exponent per block. Multiplies and most of each
accumulation then run as integer arithmetic, and floating point is needed only
where partial sums from different blocks meet. FlexBlock supports three
mantissa widths: 16, 8 and 4 bits. They are called FB24, FB16 and FB12 after
the total of mantissa bits plus the 8-bit exponent. The width can be chosen
separately for activations, weights and gradients.

All three widths run on one array of 4-bit multipliers. A 16-bit × 16-bit
product takes 16 multipliers, an 8 × 8 product takes 4, and a 4 × 4 product
takes 1. So throughput rises 4× each time the precision halves, and no
multiplier sits idle. The array is also built to be rearranged into
different groupings. It then keeps high utilisation on:

- ordinary ("3D") convolutions and fully connected layers, which reduce over
  input channels;
- depthwise ("2D") convolutions, which reduce only over the kernel window.

This repository contains synthesizable SystemVerilog for one FlexBlock core,
together with everything the core needs around it:

- the on-chip buffers;
- the control registers;
- a sequencer;
- the post-processing chain: batch norm, ReLU and pooling, masking, weight
  update, FP32-to-BFP conversion, packing for DRAM, and dynamic precision
  selection.

## Number format

A block element is a p-bit two's-complement integer `m` (p = 4, 8 or 16)
together with the block's 8-bit exponent `E`. The value is

    value = m · 2^(E − 127 − (p − 2))

so the largest magnitude in a block has its leading one at 2^(E−127). The
exponent uses the FP32 bias, so converting between FP32 and BFP is only a
shift. A multiplier takes a 4-bit sub-word of each operand:

- the top sub-word of a signed element is signed;
- all other sub-words are unsigned.

The multiplier is therefore a 5 × 5 signed multiply: the fifth bit is the
sign extension for a signed sub-word and 0 for an unsigned one
(`fb_mult4`).

Results leave the core as IEEE FP32 with these rules:

- round to nearest even;
- subnormals flush to zero;
- overflow saturates to infinity;
- NaN is not produced.

## Datapath hierarchy and how precisions are mapped

```
fb_mult4  4b x 4b (5b signed) multiplier
fb_pe     9 multipliers + adder           one 3x3 window, or 9 input channels
fb_pu     4 PEs + 4-bit shifters          one 16-bit input slot = 4 sub-words
fb_subcore 4 PUs, one per weight sub-word  one output register per PU
fb_proc_core 6 subcores                    864 multipliers
```

**Inputs.** Each subcore receives a 144-bit input bus: nine 16-bit slots. A
slot holds one 16-bit element, two 8-bit elements or four 4-bit elements.
Input channel `c` of a slot sits in the upper bits, at
`[16 − p(c+1) +: p]`. PE `k` of every PU takes bits `[4k+3:4k]` of all nine
slots. The PU then shifts the PE sums back into place:

| Input precision | Shifts applied | Result |
|---|---|---|
| 16-bit | PE3..PE0 shifted by 12, 8, 4, 0 | the sum of one 16-bit dot product |
| 8-bit | PE3/PE1 shifted by 4 | two channels summed together |
| 4-bit | no shift | four channels summed |

**Weights.** PU `k` of a subcore multiplies by weight sub-word `k`, that is,
bits `[4k+3:4k]` of each 16-bit weight slot. A 16-bit weight is therefore
spread over all four PUs, and its sub-word shifts (12, 8, 4, 0) are applied
later in the reduction unit. An 8-bit weight spans two PUs: PU3 and PU2 carry
one output channel, PU1 and PU0 the next. A 4-bit weight lives in one PU, and
each PU computes its own output channel.

**Weight lanes.** When inputs are 8 or 4 bits wide, a slot carries two or four
input channels, and each of them needs its own weight. Each subcore therefore
has four 144-bit weight lanes. Lane `c` feeds the PE that carries input
channel `c`. For 16-bit inputs only lane 0 is used. This is the one structural
departure from the paper's drawing, which shows a single 144-bit weight bus
per subcore.

Per core and cycle the array delivers:

| Precision | MACs per cycle |
|---|---|
| 16 × 16 | 54 |
| 8 × 8 | 216 |
| 4 × 4 | 864 |

All partial sums are exact integers: PE 14 bits, PU 28 bits.

## Two reduction paths

Each PU output register feeds two paths. The layer mode picks one (`fb_subcore`
applies the 2D/3D select).

### 3D reduction (`fb_red3d`)

Used for ordinary convolutions and fully connected layers.

1. For each PU column k, an integer adder tree adds the six subcores.
2. An arithmetic converter (`fb_int2fp`) turns each column sum into FP32,
   scaled by the column's exponent.
3. An FP32 adder then accumulates the column over the accumulation steps.
4. A selective FP32 tree combines the columns according to weight precision:

| Weight precision | Outputs |
|---|---|
| 16-bit | one output: PU3 + PU2 + PU1 + PU0 |
| 8-bit | two outputs: PU3 + PU2 and PU1 + PU0 |
| 4-bit | four outputs: PU3, PU2, PU1, PU0 |

**Stored partial sums.** On the first step of a group, a stored partial sum
read from the output buffer can replace the accumulator. It is added only in
the top column of each output group: column 3 for 16-bit weights, columns 3
and 1 for 8-bit, every column for 4-bit. So it is counted once.

### 2D reduction (`fb_red2d`)

Used for depthwise convolutions.

1. Per subcore, a four-way integer tree applies the weight sub-word shifts and
   sums the PUs.
2. A selective truncation stage (`fb_bit_trunc`) drops the low bits that do
   not fit 32 bits. This only happens for 16 × 16 (3 bits), and the dropped
   count is added to the exponent.
3. A selective six-way integer tree then clusters subcores:

| Cluster | Subcores per cluster | Outputs | Typical layer |
|---|---|---|---|
| CL1 | 1 | 6 | 3 × 3 |
| CL3 | 3 | 2 | 5 × 5 (25 of 27 slots) |
| CL6 | 6 | 1 | 7 × 7 (49 of 54 slots) |

4. Six converters and FP32 accumulators follow.

### Exponents (`fb_shared_exp`)

Each converter gets one scale exponent:

    sc = Ex + Ew − 254 − (px − 2) − (pw − 2) + weight sub-word shift (3D only)

Which exponents are used depends on the mode:

- **3D mode:** the input exponent of subcore 0 and the weight exponent of
  subcore 0 for each PU column. A 3D block spans the whole core.
- **2D mode:** the first subcore of each cluster supplies the exponents.

The host must give equal exponents to data that is summed in integer form.

`fb_core` combines the processing core, the exponent handler, both reduction
units and the output multiplexer.

## Sequencing and timing

The host programs a run as:

- `NGROUPS` output groups of `NSTEPS` accumulation steps each;
- a base address and a per-group stride for each buffer.

The FSM (`fb_fsm`) then reads one input word and one weight word per cycle.
Timing of each step:

| Cycle | What happens |
|---|---|
| 0 | buffer read issued |
| 1 | SRAM data and `core_valid` arrive |
| 2 | subcore registers capture the PU sums; the accumulators update |

A group's FP32 results (`res_valid`) appear two cycles after its last step.
The number of results per group is 1, 2, 4 or 6, depending on mode and
precision. The core runs at one step per cycle with no bubbles between
groups.

Results go to two places:

- The output buffer, as one six-word row per group. Later runs can read this
  row back as partial sums.
- The core output buffer (`fb_core_obuf`). It packs the results into 18-lane
  rows for the post-processing chain and pads the last row when the run ends.

When post-processing is enabled and the core output buffer has fewer than 24
free entries, the FSM stalls before starting a group. The 24 covers three
groups in flight plus one, with six results each. This is how backpressure
from DRAM reaches the core.

## Post-processing chain

All units work on 18 FP32 lanes with a valid/ready handshake.

| Unit | What it does |
|---|---|
| `fb_bn` | Range batch norm. It gathers per-lane sum, max and min in one pass (readable by the host) and applies `y = a·x + b` with per-lane FP32 coefficients. |
| `fb_relu_pool` | ReLU, or ReLU-alpha (clip at alpha); optionally max or average pooling over 2^k consecutive beats. The 4:1 output select picks ReLU, max pool, average pool or ReLU-alpha. Average divides by subtracting k from the exponent. |
| `fb_mask` | Emits a bitmap of positive lanes for the backward pass. |
| `fb_fifo` | Decouples the chain from the weight update. |
| `fb_wu` | Computes `w − η·g` for weight gradients against a weight stream from outside the core; passes activations through otherwise. With `FLAGS.wu_src` set, core results go straight to it. |
| `fb_fp2bfp` | Finds the largest exponent of each block (up to 216 elements, sent as 12 beats of 18) and right-shifts every significand to the p-bit format. It counts zero-setting errors (ZSE): non-zero elements that become 0. |
| `fb_quant` | Packs one 16-bit beat, two 8-bit beats or four 4-bit beats into each 288-bit DRAM word. |
| `fb_prec_ctrl` | At an epoch end, compares the ZSE ratio with two thresholds: above `th_up` the precision goes up one step, below `th_down` it goes down, otherwise it stays. |

## Host interface

Register writes use a synchronous 8-bit-address, 32-bit-data port. The map is
also given at the top of `rtl/fb_ctrl_regs.sv`.

| Addr | Name | Fields |
|---|---|---|
| 0x00 | CORE | [1:0] x_prec, [3:2] w_prec (0: 4b, 1: 8b, 2: 16b); [4] x_signed; [5] w_signed; [6] mode (1 = 2D); [8:7] cluster (0: CL1, 1: CL3, 2: CL6) |
| 0x01 / 0x02 | NGROUPS / NSTEPS | loop counts |
| 0x03–0x06 | IN_BASE, WT_BASE, IN_GSTRIDE, WT_GSTRIDE | buffer word addresses |
| 0x07 | FLAGS | [0] psum from output buffer; [1] post-processing on; [2] weight update on; [3] act_sel; [4] pool_sel; [6:5] out_sel; [8:7] pool log2; [9] BN apply; [10] BN statistics; [11] weight-update source = core; [12] FP2BFP precision from the controller |
| 0x08 / 0x09 | ALPHA / ETA | FP32 |
| 0x0A | BFP | [1:0] output precision; [9:2] block length |
| 0x0B | ZSE | [7:0] th_up; [15:8] th_down (fractions of 256); [17:16] initial precision |
| 0x0C | CMD | [0] start; [1] clear statistics; [2] epoch end; [3] load precision |
| 0x20+l / 0x40+l | BN_A / BN_B | BN coefficients for lane l |

Buffer word formats:

| Buffer | Word layout | Size | Depth (at 8 KB / 8 KB / 4 KB) |
|---|---|---|---|
| Input | `{ex[5..0], x_bus[5..0]}` | 912 bits | 75 words |
| Weight | `{ew[5..0][3..0], w_bus[5..0][3..0]}` | 3648 bits | 18 words |
| Output | six FP32 values | 192 bits | 170 words |

The 8 KB / 8 KB / 4 KB sizes are one sixty-fourth of a 512 KB / 512 KB /
256 KB accelerator. Exponent bits are stored beside the data and are not
counted in the byte sizes.

The input and weight buffers have a write port separate from the read port. So the host can load one address region while a run reads another, and point the next run at it with IN_BASE/WT_BASE. This is how the design double-buffers. The output buffer port is for use while the core is idle. DRAM output
(`dram_valid/ready/data/exp/beats`), the mask bitmap and the weight stream
for the update are top-level ports.

## How far this follows the paper, and where it departs

These parts follow the paper:

- the multiplier/PE/PU/subcore/core hierarchy and its sizes;
- the sub-word placement and PU shifters;
- the 2D/3D dual reduction path with the selective trees and cluster sizes;
- FP32 accumulation and the exponent addition;
- the block and buffer sizes;
- the order of the post-processing units, the four ReLU-Pool modes, the
  FP2BFP alignment with ZSE counting, and the up/down precision thresholds.

These are this design's own choices, because the paper does not give them:

- the weight lanes described above;
- the exponent bias and mantissa scaling;
- rounding and overflow rules;
- the register map and buffer word layouts;
- the FSM and its stall rule;
- psum routing into the top column;
- the truncation rule of the 2D path;
- pooling as consecutive beats;
- the DRAM packing;
- the ratio arithmetic of the precision controller.

Not built:

- **BN coefficients.** The coefficients of range batch norm are computed by
  the host from the statistics the unit gathers.
- **Backward-pass units.** The backward-pass BN and ReLU/pool units are only
  named in the paper.
- **Multi-core array.** The 64-core array that shares the buffers is not
  built. It would be independent copies of `flexblock_top`.
- **Host-side operations.** Layer tiling, softmax and layer normalisation are
  left to the host.

## Verification and simulation

Every module in `rtl/` has a self-checking testbench, `tb/tb_<module>.sv`.
Each one:

- compares the module with an independent model: bit-exact integer and FP32
  reference functions from `tb/tb_util_pkg.sv`, or element-level arithmetic
  in `real`;
- prints `TB_RESULT checks=N failures=M`;
- has a watchdog.

`tb_flexblock_top` runs the top at its default sizes, with no parameter
overrides. It makes seven layer runs:

- it covers both modes, all precisions and all three cluster sizes;
- it reuses stored partial sums, applies BN and all pooling modes, and
  bypasses to the weight update;
- it changes the dynamic precision;
- it loads new input data while a run is reading other words, then runs on that data;
- it causes FSM stalls, a full FIFO and DRAM backpressure;
- it checks every result against an arithmetic model and fails any mechanism
  that never occurred.

It builds in about two minutes and simulates in under a second.

Example with plain verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/fb_pkg.sv tb/tb_util_pkg.sv \
    $(ls rtl/*.sv | grep -v fb_pkg.sv) tb/tb_flexblock_top.sv \
    --top-module tb_flexblock_top -o sim
./obj_dir/sim
```

The packages must come first (and only once). The same command with another `tb_*.sv` file
and top module runs a unit test.

The flip-flops use asynchronous active-low reset. The assertions use
`disable iff (!rst_n)`, which makes verilator report the reset as used both
synchronously and asynchronously; this is a lint note, not a circuit issue.
