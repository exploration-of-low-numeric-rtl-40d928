# A low-numeric-precision CNN inference engine for FPGAs

Networks trained with 2-bit activations and ternary weights ({-1, 0, +1}, times
a per-layer constant) lose little accuracy, and they need no multipliers: a
multiply by a ternary weight is a choice between `A`, `-A` and `0`; with binary
weights it is a sign flip; with 1-bit activations and weights it is an XNOR
and the sum becomes a population count. On an FPGA such products are made from
a handful of LUTs, so many more dot-product engines fit than if each used a
DSP multiplier. The spare DSP blocks can still be put to work by packing
several 2-bit operands into one wide multiplier.

This repository holds SystemVerilog RTL for an accelerator built on that idea,
following the architecture of "Exploration of Low Numeric Precision Deep
Learning Inference Using Intel FPGAs" (Colangelo et al.). The paper extends
an OpenCL deep-learning accelerator and describes the low-precision parts:
the processing elements (PEs), the packed-DSP engine, the fused batch-norm
stage and the quantiser. The memories, the sequencing and the host interface
are given here in the simplest form that makes a complete, testable design.
They are this design's own and are marked as such below.

The default configuration is the paper's hardware proof of concept: 2-bit
activations, ternary weights ("2xT"), 64 words per dot product.

## 1. The layer loop

One convolution layer is one trip around a loop:

```
        +--------------------------------------------------------------------+
        |                                                                    |
        v            act (2b x 64)         INT16 x 64          FP32 x 64    |
  feature_buffer ------------------> pe_array ----------> bns -----------> relu_quant
  (2 banks)          ^                 ^                  gamma,beta          | 2b x 64
                     |                 |                                     v
                layer_ctrl        filter_cache                            maxpool
           (addresses, flags)     (weights)                                 |
                     |                                                      |
                     +------ write address --------- feature_buffer <-------+
                                                     (other bank)
```

* The **feature buffer** holds the current layer's input map in one bank; the
  output map is written to the other bank and becomes the next layer's input.
* The **PE array** computes 64 output features of one output pixel in
  parallel. Each beat (one cycle) supplies 64 input channels of one input
  pixel; a dot product takes `kh * kw * cg` beats (`cg` = input channels / 64).
* **bns** applies the per-feature scale and shift in single precision.
* **relu_quant** clips to [0, 1] and rounds back to a 2-bit code.
* **maxpool** keeps the maximum over a pooling window.

Number formats along the loop: unsigned `ACT_W`-bit codes out of the buffer,
signed 16-bit dot products out of the array, IEEE-754 binary32 after
batch norm, unsigned `ACT_W`-bit codes again after ReLU. A code `q` stands for
the value `q / (2^ACT_W - 1)`, so 2-bit codes 0..3 mean 0, 1/3, 2/3, 1.

Every stage accepts one vector per cycle, so nothing ever stalls. A layer of
`B` beats takes `B` cycles plus a fixed pipeline depth of about
`NUM_PE + NUM_DSP + 10` cycles.

## 2. Processing elements (`pe`)

A PE multiplies `WORDS` activations by `WORDS` weights, adds the products in
an adder tree and adds the sum to its accumulator. The accumulator's feedback
input passes through a mux that selects 0 on the first beat of a dot product,
so a new dot product starts without a clear cycle. The result is valid for one
cycle, one cycle after the last beat.

The weight kind is a parameter (`lpn_pkg::wkind_e`):

| `WKIND`      | weight code                           | product                   |
|--------------|---------------------------------------|---------------------------|
| `WK_TERNARY` | 2-bit: `01` = +1, `11` = -1, `00` = 0 | `A`, `-A` or 0 (mux)      |
| `WK_BINARY`  | 1-bit: `1` = +1, `0` = -1             | `A` or `-A` (sign flip)   |
| `WK_XNOR`    | 1-bit act and weight, both +-1        | XNOR; sum = 2*popcount - N |
| `WK_INT`     | signed `WGT_W`-bit                    | multiply                  |

The per-layer ternary/binary magnitude alpha is not applied here. It is folded
into the batch-norm scale (section 5). The code `10` is not a legal ternary
weight and counts as 0.

The paper's PEs are netlists hand-packed into Stratix 10 ALMs. Here they are
written behaviourally, so synthesis decides the packing, and the ALM counts
the paper gives per PE size will not be reproduced.

## 3. The packed-DSP engine (`dsp_pack_pe`)

This is the least obvious part of the design. An Arria 10 DSP block in 18x18
mode has two independent signed 18x18 multipliers. To do four 2-bit x ternary
products in one of them, four weights are packed into operand `a`, 5 bits
apart. Operand `b` is one unsigned 2-bit activation with 16 zero bits above it.

```
bit:  17  16  15  14  13  12  11  10   9   8   7   6   5   4   3   2   1   0
      Sd  D1  D0  0   0   Sc  C1  C0  0   0   Sb  B1  B0  0   0   Sa  A1  A0
```

`A..D` are the 2-bit weight codes of four output features (lanes 0..3). `S`
repeats the weight's sign bit, and the zero pad bits separate the fields.
Field `l` therefore holds the 3-bit two's-complement pattern of `w_l`, read as
an unsigned number from 0 to 7. With an activation `x` of 0..3, each partial
product is at most 3 * 7 = 21 < 32, so it never spills into the next field.
Bits `5l+2 .. 5l` of the 36-bit product are then `x * w_l mod 8`. Because
`|x * w_l| <= 3`, read as a 3-bit signed number this is exactly `x * w_l`.

The top field's sign bit is also the sign bit of the whole 18-bit operand. The
signed multiplier then subtracts `2^18 * x` from the product, which leaves
bits 17..0 unchanged.

Each DSP thus computes 8 products: 2 activations x 4 lanes. A `dsp_pack_pe`
with `WORDS` activations per beat uses `WORDS` multipliers, that is `WORDS/2` DSP blocks. It
extracts the 3-bit lane products, sums them per lane in logic and keeps four
16-bit accumulators. To the array it looks like four PEs sharing one input.
Example: `x = 3` with weights `(+1, -1, 0, -1)` gives the packed operand
`0x380E1` (a negative 18-bit number). The low 18 bits of the product are
`0x282A3`, whose fields from bit 0 up are 3, 5, 0 and 5: the 3-bit values
+3, -3, 0, -3.

The paper shows the field layout and that "1a/2a" are packed and "1b/2b" are
single padded values. It does not say which operand carries the weights. The
choice here (weights packed, activation single) is the one that uses the
sign-extension bits. The paper draws the two multiplier outputs meeting in an
ALM adder. Adding the packed words directly would overflow the 5-bit fields,
so the lanes are unpacked before the adder.

## 4. The systolic array (`pe_array`, `filter_cache`)

The array is a chain of `NUM_SLOT = NUM_PE + NUM_DSP` slots: 48 logic PEs,
then 4 packed-DSP engines, giving `NUM_FEAT = 48 + 4*4 = 64` features. A beat
carries an activation vector, a filter-cache address, first/last flags and a
tag (the output group). It enters slot 0 and moves one slot further per
cycle. In slot `k` the beat's address reads that slot's weights from the
filter cache (one cycle), and then the engine accumulates.

The filter cache has one memory per feature and one read port per feature,
since neighbouring slots read different addresses in the same cycle. Finished
dot products leave the slots at staggered times. A delay line of
`NUM_SLOT-1-k` registers behind slot `k` realigns them, so all 64 results and
the tag appear together, `NUM_SLOT + 2` cycles after the last beat entered.
Dot products as short as one beat, back to back, work.

## 5. Fused batch norm and scale (`bns`)

Inference-time batch norm (mean `w`, deviation `x`), the trained scale layer
(`y`, `z`) and the ternary/binary constant alpha collapse into one affine map
per feature. The host computes the two constants offline:

```
gamma = (y / x) * alpha
beta  = z - (y / x) * w
out   = gamma * acc + beta
```

`bns` holds a table of `(gamma, beta)` binary32 pairs for `GROUPS` output
groups x 64 lanes (1,024 features) and looks them up with the tag travelling
with the data. It has three pipeline stages:
1. table lookup;
2. int16 to binary32 (exact), then multiply;
3. add.

Each operation rounds to nearest even. Subnormal inputs and results are
flushed to zero, and NaN and infinity are not handled: this datapath never
produces them. The arithmetic lives in `lpn_pkg` (`fp32_from_int`,
`fp32_mul`, `fp32_add`).

## 6. ReLU and requantisation (`relu_quant`)

```
q = floor( min(1, max(0, out)) * L + 0.5 ),   L = 2^ACT_W - 1
```

For 2 bits (`L = 3`) this is the paper's clip-and-round quantiser. It is
evaluated exactly: with `out = m * 2^(e-150)` and `s = 150 - e`,
`q = (m*L + 2^(s-1)) >> s`. Values of 1 or more give `L`, and negative values
give 0.

## 7. Sequencing a layer (`layer_ctrl`, `lpn_pkg::layer_cfg_t`)

This part is this design's own. The host writes a descriptor and pulses
`start`. The descriptor fields are:
* input size `in_w x in_h`;
* `cg` input channel groups and `kg` output groups (64 channels each);
* filter `kw x kh`, `stride`, `pad`;
* pooling window `pool` and step `pool_stride`;
* the pooled output size `out_w x out_h`, computed by the host;
* the source bank and the base addresses.

The host computes the output size as:

```
conv = (in + 2*pad - k) / stride + 1
out  = (conv - pool) / pool_stride + 1
```

The controller walks, outermost first: output group, pooled row, pooled
column, window row, window column, filter row, filter column, channel group.
Each step is one beat:

* buffer address `in_base + (iy*in_w + ix)*cg + c`, where
  `iy = (py*pool_stride + wy)*stride + ky - pad`;
* filter address `((g*kh + ky)*kw + kx)*cg + c`;
* pixels outside the map are not read, and the array gets zeros instead.

Because the convolution outputs of one pooling window come out one after
another, `maxpool` is a running maximum over `pool*pool` vectors, with no line
buffer. With overlapping windows (AlexNet's 3x3 step 2), the outputs two
windows share are computed twice (about 2.25x the work of that layer).
`pool = pool_stride = 1` turns pooling off.

A pooled vector of 64 codes is one buffer word. It is written to
`out_base + (py*out_w + px)*kg + g` in the other bank: the same layout as the
input, so the next layer reads it directly.

## 8. Using the top level (`lpn_accel`)

All ports are plain signals:

* `h_fb_*`: write the input map into a bank and read results back. Allowed
  only while `busy` is low; while a layer runs the controller owns the buffer.
* `fc_*`: load filter-cache entries, one (feature, address) word of 64
  weights per cycle. Entry `((g*kh+ky)*kw+kx)*cg + c` of feature `f` holds
  the weights of output channel `64*g + f` for tap `(ky,kx)` and input
  channels `64*c .. 64*c+63`.
* `prm_*`: load `(gamma, beta)` for (group, feature).
* `start`, `cfg`: run one layer. `busy` stays high until `done` pulses, one
  cycle after the last output word has been written.

Filters and parameters are reloaded per layer. Layers whose weights exceed
the filter cache (for example a large fully connected layer) are run as
several passes over subsets of output groups, each with its own `out_base`.

Parameters and defaults:

| parameter  | default      | meaning                                     | origin |
|------------|--------------|---------------------------------------------|--------|
| `WKIND`    | `WK_TERNARY` | weight kind                                 | paper (2xT) |
| `ACT_W`    | 2            | activation bits                             | paper (2xT) |
| `WGT_W`    | 2            | weight bits                                 | follows `WKIND` |
| `WORDS`    | 64           | words per dot product per beat              | paper (2xT PE) |
| `ACC_W`    | 16           | accumulator bits                            | paper (INT16) |
| `NUM_PE`   | 48           | logic PEs                                   | this design |
| `NUM_DSP`  | 4            | packed-DSP engines (4 features each)        | this design |
| `FB_DEPTH` | 65536        | words per feature-buffer bank               | this design |
| `FDEPTH`   | 1024         | filter-cache entries per feature            | this design |
| `GROUPS`   | 16           | output groups in the batch-norm table       | this design |

`NUM_PE + 4*NUM_DSP` must equal `WORDS`. The packed-DSP engines exist only
for `ACT_W = 2` with ternary weights. For the paper's 8-bit-activation
ternary/binary architecture, set `ACT_W = 8`, `WKIND = WK_TERNARY` or
`WK_BINARY` and `NUM_DSP = 0`.

## 9. How far it goes, and where it departs from the paper

What follows the paper:
* the datapath order and the number formats;
* the PE arithmetic of each weight kind;
* the 2xT DSP packing layout;
* the fused gamma/beta in single precision;
* the quantiser formula.

What is this design's own:
* array and memory sizes;
* the two-bank buffer;
* the filter-cache organisation;
* the systolic forwarding and the deskew;
* the layer descriptor, loop order and stride/pad/pool support;
* the host ports;
* floating-point rounding details;
* the ternary code assignment.

The paper's accelerator is an OpenCL design whose blocks talk over channels.
Here they are wired directly.

Not included:
* the DDR interface and the host runtime;
* the offline merging of batch-norm parameters;
* any layer type other than convolution + batch norm + ReLU + max pool. In
  particular there is no element-wise addition, so ResNet's shortcut
  connections cannot run, and there is no average pooling.

Of the paper's workloads, the middle layers of AlexNet fit the default
configuration: every map and filter set fits the memories, and overlapping
pooling and stride 4 are supported. Two layers do not:
* the first layer, whose 8-bit RGB input does not fit in 2-bit codes;
* the classifier output, which cannot leave through the 2-bit quantiser.

The two AlexNet layers conv4 (54,756 beats) and conv5 with its pool (69,984
beats) have been simulated end to end at the default parameters with random
weights and activations. Each ran at one beat per cycle plus the pipeline
depth.

Throughput figures from the paper (3,700 images/s on Arria 10 at about
275 MHz) depend on the vectorisation found by its design-space search and
have not been reproduced.

The 16-bit accumulator wraps silently. For AlexNet-sized layers the
worst-case dot product (9,216 x 3) fits, but wider networks can exceed it.

## 10. Simulation

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. The reference models are independent of the
RTL. The float reference (`tb/tb_fp_pkg.sv`) goes through the simulator's
double precision.

| testbench            | covers |
|----------------------|--------|
| `tb_pe`              | all four PE kinds, random dot products, latency |
| `tb_dsp_pack_pe`     | packed-DSP engine, including all-maximum operands |
| `tb_filter_cache`    | parallel per-feature reads |
| `tb_pe_array`        | array with 3 PEs + 1 DSP engine, deskew, tags, latency `NUM_SLOT+2` |
| `tb_feature_buffer`  | both banks, read-during-write |
| `tb_bns`             | bit-exact binary32 against the reference |
| `tb_relu_quant`      | 2- and 8-bit quantiser, boundary values |
| `tb_maxpool`         | windows of 1, 4 and 9, clear |
| `tb_layer_ctrl`      | beat stream and write addresses for padded, strided and overlapping-pool layers |
| `tb_lpn_accel`       | three chained layers at reduced size (8 words, 4 PEs + 1 DSP engine) |
| `tb_lpn_accel_full`  | two chained layers with every parameter at its default |
| `tb_alexnet_conv45`  | AlexNet's conv4 and conv5 (+ 3x3/2 pool) at the defaults, random data |

The two top-level tests also count how often each mechanism was exercised and
fail if one never was:
* zero padding and multi-beat dot products;
* zero and negative weights, and negative dot products;
* ReLU clipping and saturation;
* pooling, overlapping pooling and several output groups;
* the bank swap and packed-DSP results.

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_lpn_accel \
    -y rtl -y tb +libext+.sv -Irtl rtl/lpn_pkg.sv tb/tb_fp_pkg.sv tb/tb_lpn_accel.sv
./obj_dir/Vtb_lpn_accel
```

Replace `tb_lpn_accel` with any testbench name. The full-size test builds in
under a minute and runs in well under a second; the AlexNet test runs for
about 15 seconds.
