# Arithmetic packing on DSP slices: SDV and BSEG operators in SystemVerilog

An FPGA DSP slice of the DSP48E2 class has a 27 x 18-bit signed
multiplier, a 27-bit pre-adder ahead of it and a 48-bit accumulator behind
it. One 4-bit multiply-accumulate per slice leaves most of that datapath
unused. This design packs several low-precision operands into the wide
operands, so that a single multiplication produces several independent
products. These products sit in fixed bit fields, called *lanes*, of the
result. Two operators are built on this idea:

* **SDV** (soft datapath vectorization): one multiplier input holds a
  vector of N weights, the other holds one shared activation. The
  accumulator gathers N dot products side by side. Carries and borrows
  may cross lane boundaries. They are not prevented: they are observed
  with a two-bit reference per lane and corrected at the end. This
  operator is a matrix-vector unit.
* **BSEG** (binary segmentation): both multiplier inputs are packed, NK
  kernel elements on one side and NI input elements on the other. The
  multiplier then adds some of the pairwise products itself, which is
  exactly the sharing pattern of a convolution. Every lane carries a
  guard offset, so lanes can never interfere. This operator is a 1D
  convolution layer.

The packing works for signed operands of any width, through a
sign-splitting trick that uses the slice's pre-adder. The packed
arithmetic therefore costs only small amounts of logic outside the DSP
slices.

`packing_accel` is the top module. It instantiates both operators with
their reference configurations:

* a 24 x 24 matrix of 4-bit weights times a 4-bit vector, one product
  every three cycles on 48 slices;
* a 1 x 1500 x 16 input convolved with 128 kernels of 1 x 8 x 16, all
  4-bit, at eight outputs per cycle on 192 slices.

## 1. Signed packing through the pre-adder

A signed W-bit value v equals `-2^(W-1)*s + m`, where s is its sign bit
and m is its W-1 low bits. To pack values `v_0..v_(N-1)` at lane offsets
`i*L`, `packed_dsp` builds two words in front of the slice's pre-adder:

* `d` concatenates all the magnitudes m_i, each at bit `i*L`;
* `a` holds every sign bit s_i at its own position, bit `i*L + W-1`.

The pre-adder then forms `d - a`. This equals `sum_i 2^(iL) * v_i`, the
true arithmetic sum, even when some v_i are negative. No fabric adder or
carry chain is needed. Unsigned values are simply concatenated and `a` is
zero. `dsp_slice` models the slice as `P = (D - A) * B + C (+ P)`, with
four pipeline stages from operands to P. In the real slice the C operand
is unregistered and added at the P stage. The model does the same, which
lets fabric feedback paths reuse P in the cycle after it is produced.

## 2. SDV: packed accumulation with tracked spill-over

For WA-bit weights and WB-bit activations, the lane size is
`L = WA + WB - 1`. The lane count is the largest N with
`(N-1)*L + WA + 1 <= 27`: only the top lane needs its sign protected, and
it may grow into the free upper bits of P. For 4-bit operands, L = 7 and
N = 4.

A lane's accumulated value is wider than L bits. Over many steps it
carries into, or borrows from, the lane above it. `sdv_spill_tracker`
counts these spills instead of preventing them:

* A 2-bit LUT per lane (`lsb` in `sdv_dsp_unit`) computes
  `(w_i * x) mod 4` of every product. A running reference sums these
  modulo 4.
* `2^L` is a multiple of 4. The two low bits of lane i+1 in P therefore
  equal that lane's reference plus the total spill `S_i` out of lane i,
  modulo 4.
* With `L = WA + WB - 1`, one step changes `S_i` by at most three
  distinct values: -1..1 for signed operands, 0..2 for unsigned ones.
  The change is recovered exactly from its residue. The decoder uses the
  range -2..1 for signed and 0..3 for unsigned. It is accumulated in a
  wide fabric counter.
* After the last step, each lane is corrected:
  `res_i = 2^L*S_i + R_i - S_(i-1)`. Here R_i is the L-bit field of lane
  i read as unsigned. The top lane is the signed rest of P minus
  `S_(N-2)`.

The tracker is pipelined one cycle behind P. It uses the first/last
flags that travel with each step through the unit's three-stage operand
pipeline.

### The matrix-vector unit

`sdv_mvu` uses the FINN folding terms: PE output rows and SIMD input
columns per cycle.

* Rows are packed N to a slice. This gives `ceil(PE/N) x SIMD` units.
  Unit (g, s) accumulates rows g*N..g*N+N-1 of column s over the
  `SF = MW/SIMD` steps of a fold.
* One pipelined adder tree per row then adds the corrected lane results
  over s.
* Weights arrive as one PE x SIMD tile per step on an AXI-Stream.
* Activations are read during the first row fold only. A small buffer
  replays them for the other `MH/PE - 1` folds.
* An output beat carries the PE results of one fold,
  `5 + log2(SIMD)` cycles after the fold's last step. With the defaults
  (PE = 24, SIMD = 8) that is 8 cycles, and a new vector is accepted
  every 3 cycles.
* A stalled output freezes the whole pipeline through a common clock
  enable.

## 3. BSEG: two packed operands and a chain of slices

This is the part of the design that takes the most care.

### Lane geometry

Kernel elements (signed, WK bits) are packed NK to the 27-bit side.
Input elements (unsigned, WI bits) are packed NI to the 18-bit side, all
at lane size L. The constraints are:

    (NK-1)*L + WK + 1 <= 27        (NI-1)*L + WI + 1 <= 18
    2^(L-1) >= min(NK,NI) * 2^(WK-1) * (2^WI - 1)             (guard)
    2^(L-1) >  min(NK,NI) * (2^(WK-1)-1) * (2^WI - 1) + 2^WL - 1

The package `pack_pkg` evaluates them, and the engine checks them at
elaboration. For 4-bit operands the smallest lane that reaches
NK·NI = 6 is L = 9:

* NK = 3 (23 <= 27) and NI = 2 (14 <= 18);
* the guard needs 256 >= 2·8·15 = 240;
* the low part WL = 5 is the widest that satisfies the last line.

In DSP g the kernel elements are placed reversed: lane i holds
`K[g*NK + NK-1-i]`. The input lanes hold `x[b*NI + j]` for block b.
Product lane m (m = 0..NK+NI-2) is then the sum of all pairs with
i + j = m. All of these pairs belong to one output position,

    p = b*NI + m + 1 - (g+1)*NK .

The multiplier has added up to `min(NK,NI)` products of that position
before anything leaves the slice.

### Moving partial sums between blocks and slices

A position needs every kernel element. Its partial sum therefore has to
follow the data. The `G = ceil(KW/NK)` slices of `bseg_engine` route each
lane, through the C port, to where the same position appears next:

* **Self feedback.** A lane m >= NI of DSP g holds position p. In the
  next block, p appears in lane m - NI of the same slice. The lane is
  fed back there.
* **To the next slice.** Lanes 0..NI-1 of DSP g are complete for this
  group of NK kernel elements. The input block reaches DSP g+1 one
  block period later, through the B cascade and a fabric delay. Lanes
  0..NI-2 then enter DSP g+1 at lanes NK..NK+NI-2 for that same block.
  Lane NI-1 enters at lane NK-1 one block later.
* **Output.** The completed lanes 0..NI-1 of the last slice are the
  outputs: position `b*NI + k + 1 - G*NK` for output k. Slices beyond
  KW hold zero kernel elements, so a kernel need not be a multiple of
  NK.

### Guard offset and slicing

Every lane that enters through C is biased by `2^(L-1)`. The biased
accumulation of one product stack then stays within `[0, 2^L)`, and no
carry or borrow crosses into the next lane. This holds however the signs
fall.

A sum over a long kernel would overflow the lane. Therefore, whenever a
lane leaves a slice, it is split:

* the low WL bits go back into the C word, under a fresh guard offset;
* the part above them, minus the bias, is added to a fabric "high"
  counter that travels with the lane.

At the output, the result is `high * 2^WL + low`. The guard condition
with the WL term keeps the re-biased lane in range.

### Round robin

An engine can compute R independent correlations, for example R output
channels, one per cycle in turn (slot r = cycle mod R). Every feedback
path is then R cycles long, or 2R for the lane that waits one block.
These delays are fabric delay lines (`delay_line`, a circular buffer
that maps to LUT RAM). The caller presents, in each cycle, the input
block and the kernel of the current slot. An input block therefore
stays in place for R cycles.

Latency from a block to the outputs it completes is
`(G-1)*R + 5` enabled cycles. A user tag travels along with the same
delay.

## 4. The convolution layer

`bseg_conv` computes

    y[p][c] = sum_q sum_d K[c][d][q] * x[p+q][d],  0 <= p <= W_I - KW

for a 1 x KW x D kernel per output channel c. It has the following
parts.

* **Input generator** (`bseg_input_gen`). Pixels arrive channels-last,
  one beat with all D channels. The generator collects NI pixels and
  presents them reordered per channel, `blk[d][j]`. A second buffer
  holds the presented block while the next one is collected. After the
  W_I pixels of a frame, it produces zero blocks until the last outputs
  have left the chain. `NB_FEED` blocks are presented per frame: 753 at
  the defaults.
* **Kernel buffer.** The kernels are written one channel at a time
  through `k_we / k_ch / k_data`, while the layer is idle. In slot r the
  engines read the kernels of channels `r*PAR_C .. r*PAR_C + PAR_C-1`.
* **Engines.** There are `PAR_C x D` instances of `bseg_engine`, one per
  (parallel channel, depth). Each uses `R = C / PAR_C` round-robin
  slots.
* **Depth reduction.** A pipelined adder tree per channel column and
  position adds the D depth results.
* **Output stream.** Each beat is one (block, slot) pair:
  `m_y_tdata[j][pc]` holds position `p0 + j` of channel
  `r*PAR_C + pc`, with `p0 = b*NI + 1 - G*NK`. `m_y_tkeep[j]` marks the
  positions that exist. Beats with no valid position are dropped. The
  beat leaves from an output register. An output stall freezes the
  whole layer. A missing input block freezes the engines as well, but
  the output register still drains, so no beat is delivered twice.
* **Frames.** Between frames the engines run idle periods of R cycles,
  so a frame's tail drains without help from the next frame.

With the defaults, 64 engines of 3 slices each make 192 slices, and R is
32 slots. An input block of NI = 2 pixels is used for 32 cycles. This
gives `2 x 4 = 8` outputs per cycle, and the input is read at one pixel
per 16 cycles. A full 1500-pixel frame, 191,104 outputs, takes 24,138
cycles in simulation. That is 24,000 cycles of input plus the pipeline
depth.

## 5. Interfaces and timing summary

| Module | Function | Latency / rate |
|---|---|---|
| `dsp_slice` | `P = (D -/+ A)*B + C (+P)` | operands to P: 4 enabled cycles |
| `packed_dsp` | sign-split packing + slice: `P = sum 2^(iL) v_i * B + C (+P)` | operands to P: 4 enabled cycles |
| `sdv_dsp_unit` | N lanes, one slice, exact results | last step to `res_valid`: 5 cycles |
| `sdv_mvu` | MH x MW matrix-vector product | MW/SIMD steps per fold; +5+log2(SIMD) |
| `bseg_engine` | 1D correlation, R slots | `(G-1)*R + 5` cycles |
| `bseg_input_gen` | channels-last to per-channel blocks | 1 pixel per beat |
| `bseg_conv` | 1 x KW convolution layer | NI*PAR_C outputs per cycle |
| `adder_tree` | pipelined sum | `log2(N)` cycles |
| `delay_line` | fixed delay (helper) | DEPTH cycles |

All streams use AXI-Stream valid/ready. All state advances with a clock
enable. `rst` is synchronous and active high, and clears every register
that is read.

`packing_accel` exposes the two operators' ports with the prefixes
`mvu_` and `conv_`. Its parameters `MVU_*` and `CONV_*` are passed
through. The two operators share only clock and reset. In a dataflow
network each would be a separate layer.

## 6. Where this design departs from the paper, and what it leaves out

The design follows the published scheme in these respects:

* sign splitting through the pre-adder;
* the SDV lane rule and the mod-4 spill tracking with the correction
  formula;
* the BSEG packing conditions, the guard offset through C, and the
  low/high slicing;
* input buffering in the B cascade;
* round-robin output channels;
* adder-tree combination of sliced 1D results.

These are this design's own choices:

* **BSEG lane routing.** The lane-by-lane routing between slices, the
  timing of the round-robin feedback and the fabric delay lines.
* **Slicing at every feedback.** The low/high split is applied at every
  feedback step, not only between slices.
* **BSEG sizes.** L = 9 and WL = 5 are the smallest lane and the widest
  low part. No cost comparison against L + 1 is made.
* **BSEG parallelism.** The split of the eight outputs per cycle into
  PAR_C = 4 parallel channel columns times NI = 2 positions.
* **SDV folding.** The three-cycle SDV product is obtained with PE = 24,
  SIMD = 8.
* **Weights and kernels.** SDV weights are streamed in, not held in a
  weight memory. Convolution kernels sit in a register buffer with a
  simple write port.
* **Pipelining.** The register configuration of the slice model and
  the pipelining of the spill tracker.
* **Convolution output beats.** They hold NI positions of PAR_C
  channels of one slot. They are not re-ordered into channels-last
  pixels.

These parts are not built:

* **2D convolutions.** Kernels taller than one row would need line
  buffers in the input generator and an adder tree over the kernel rows.
  The sliced-row principle is the same as for depth. Without them, the
  3 x 3 layers of image networks (for example UltraNet) cannot run on
  `bseg_conv` as it stands.
* **Padding, stride and multiple input folds.** The convolution is
  "valid" only: there is no zero padding and no stride. The input
  generator takes one whole pixel per beat.
* **DSP58.** There is no DSP58 variant, and the guard offset is not
  loaded through the slice's rounding constant.
* **The surrounding network.** Thresholding, pooling and stream width
  converters, and the compiler flow that would place these operators in
  a network, are outside this RTL.

## 7. Verification

Every module has a self-checking testbench in `tb/`. Each compares
against sums computed independently in the testbench and prints
`TB_RESULT checks=<n> failures=<n>`.

* `tb_dsp_slice`, `tb_packed_dsp`, `tb_adder_tree`: random and
  extreme operands, clock-enable gaps, exact latency.
* `tb_sdv_spill_tracker`, `tb_sdv_dsp_unit`:
  * all signedness combinations;
  * long accumulations, which force positive and negative spills;
  * the 5-cycle result latency.
* `tb_sdv_mvu`:
  * the default 24 x 24 unit, with one vector per 3 cycles and the
    latency checked;
  * a folded 12 x 12 configuration with 5-bit signed operands, with
    back-pressure.
* `tb_bseg_engine`: R = 1 with KW = 8, and R = 3 with KW = 5 (a
  kernel that does not fill its last slice). Maximum-magnitude operands
  exercise the high-part counters.
* `tb_bseg_input_gen`, `tb_bseg_conv`:
  * reordering and zero flushing;
  * input gaps and output stalls;
  * keep flags and the throughput bound.
* `tb_packing_accel`: both operators at reduced size, end to end. It
  counts each mechanism and fails if one never occurs:
  * positive and negative SDV spills;
  * row-fold replay and MVU stalls;
  * nonzero BSEG high parts;
  * input starvation and idle periods;
  * convolution stalls and partial keeps.
* `tb_packing_accel_full`: the top with every parameter at its default.
  It runs four matrix-vector products and one whole 1 x 1500 x 16 frame
  with all 128 kernels, and checks all 191,104 convolution outputs and
  the frame time.

To simulate with plain Verilator, list the package first:

    verilator --binary -Wno-fatal --top-module tb_bseg_conv \
        rtl/pack_pkg.sv $(ls rtl/*.sv | grep -v pack_pkg) tb/tb_bseg_conv.sv -o sim
    ./obj_dir/sim

`-Wno-fatal` keeps the width-extension warnings of the testbenches from
stopping the build. The full-size testbench builds and runs in about a
minute.

To change the operators, set the parameters of `sdv_mvu` or `bseg_conv`
(or `MVU_*` and `CONV_*` on the top). The lane geometry follows from the
operand widths. For BSEG, L may be raised above the minimum. `NK`, `NI`
and `WL` are then recomputed, and an elaboration check rejects
combinations that violate the guard conditions.
