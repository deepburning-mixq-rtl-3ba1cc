# Mixed-precision CNN accelerator with DSP packing

FPGA DSP blocks multiply wide operands (27 × 18 bits on a DSP48E2), while
mixed-precision networks use weights and activations of 2 to 8 bits. Giving each
small multiplication its own DSP wastes most of the multiplier. This design
instead packs several low-precision multiplications into one DSP product. The
operands go into the two ports at chosen bit offsets, so that the independent
products (or sums of products) land in separate bit segments of the result.
The segments are then cut apart with a little logic.

The RTL has three layers:

* **Packing processing elements (PEs).** Each PE is one DSP (two for operand
  separation) plus its packing and decoding logic. There are two packing
  schemes, *kernel packing* and *filter packing*, and two refinements,
  *1-bit overpacking* and *operand separation*. For either scheme, a
  LUT-only PE with the same interface can take the place of a DSP PE.
* **Layer stages.** Each stage computes one convolution layer with PF PEs in
  parallel, then batch normalisation, ReLU and requantisation to the next
  layer's width. Every layer can have its own bit widths and packing.
* **A fully pipelined accelerator.** The stages are chained through FIFOs.
  The example top level, `mixq_accel`, is a three-layer network that uses each
  mechanism at least once.

Choosing bit widths per layer, choosing the packing per bit-width pair, and
sizing each stage happen at design time, outside the hardware. In this RTL
those choices are module parameters.

## 1. Packing arithmetic

All PEs target a signed 27 × 18 multiplier with a 48-bit accumulator
(`dsp_mul`). Activations are unsigned because they come out of a ReLU. Weights
are two's complement. `p_b` is the *pitch*: the bit distance between
neighbouring segments. It is the product width plus `g_b` guard bits.

### Kernel packing (`kernel_pack_pe`)

The PE packs ND activations from adjacent pixels onto the 18-bit port D,
`p_b` bits apart. It packs NE weights from NE different output channels onto
the 27-bit port E, `ND·p_b` bits apart:

    D = Σ_i a[i]·2^(i·p_b)          E = Σ_j w[j]·2^(j·ND·p_b)
    D·E = Σ_j Σ_i (w[j]·a[i]) · 2^((i + ND·j)·p_b)

Segment `i + ND·j` holds `w[j]·a[i]`, so there are ND·NE independent products
per DSP. The widths must fit the ports: `AB + (ND-1)·p_b ≤ 17` (the sign bit
of D must stay 0 for unsigned data) and `WB + (NE-1)·ND·p_b ≤ 27`. With
`p_b = AB + WB + GB`, the DSP's own accumulator can add up to `2^GB` packed
products, for example over input channels, before any segment overflows.
Decoding then happens once per accumulation instead of once per product.

### Filter packing (`filter_pack_pe`)

A 1-D convolution is a polynomial product. The PE packs the KP filter taps
and NP consecutive activations as polynomials evaluated at `2^p_b`:

    F = Σ_i f[i]·2^(i·p_b)          S = Σ_j s[j]·2^(j·p_b)
    F·S = Σ_k c[k]·2^(k·p_b),       c[k] = Σ_{i+j=k} f[i]·s[j]

One multiplication gives all KP+NP−1 coefficients of the convolution.
Operands sit closer together than in kernel packing. In exchange, each
coefficient already sums up to `min(KP,NP)` products, so
`GB ≥ ⌈log2 min(KP,NP)⌉` is required. Only the guard bits above that minimum
(`E_g`) are available for accumulation inside the DSP.

A CNN layer computes a correlation, not a convolution. The kernel row is
therefore stored reversed: `f[i] = w[2−i]`. Coefficient `c[k]` is then the
window output whose taps cover `s[k−2] … s[k]`.

`W_ON_WIDE` selects which operand uses the 27-bit port. Some configurations
are only reachable with the activations on the wide port. One example is
W2/A2 with 3 taps × 5 activations, which gives 15 multiplications per DSP.

### Decoding segments (`pack_decoder`)

Segments are peeled off from the least significant end. A negative segment
borrows one from the segment above it. So the remainder is
`(P >>> p_b) + sign(low segment)`, which adds the borrow back.

### 1-bit overpacking

With `OVERPACK = 1`, the pitch is one bit narrower than the segments need.
The MSB of each segment then overlaps the LSB of the segment above it. This
saves one bit per segment, which can be enough for one more operand per port.

The overlap is repaired with the LSB of every higher segment, which is cheap
to compute in logic. The LSB of a product is the AND of the operand LSBs, and
the LSB of a sum of products is the XOR of those ANDs. The PE accumulates
this parity with XOR alongside the DSP pipeline. The decoder then:

* takes the low segment's top bit as *overlapped bit XOR parity*, which is
  the parity added into that bit, modulo 2;
* adds the same XOR to the higher segment. That value is exactly the sign bit
  that the low segment extended into it.

### Operand separation (`opsep_filter_pe`)

A WB-bit weight is split into a signed high half `f_H` (WB − ⌈WB/2⌉ bits)
and an unsigned low half `f_L` (⌈WB/2⌉ bits). Each half is filter-packed on
its own DSP, and the results are combined as `c = 2^⌈WB/2⌉·c_H + c_L`. The
narrower halves can pack more densely, which sometimes outweighs the cost of
the second DSP.

With `SEP_ACT = 1` the activation is split instead. Both halves are then
unsigned (⌈AB/2⌉ low bits and the rest), and the full weight goes to both
DSPs. For example, W4/A8 becomes two W4/A4 filter packings of 3 taps × 2
activations each.

### Multiplications per DSP

A filter longer than KP taps is split into ⌈K/KP⌉ sub-filters. Each
sub-filter takes one DSP pass, and the partial coefficients are summed. The
table below uses a 3 × 3 kernel, whose rows are 3-tap filters (K = 3). It
gives the effective multiplications per DSP, `3N / (⌈3/KP⌉·⌈N/NP⌉)`. For a
long row of N activations this is 3·NP / ⌈3/KP⌉:

| weights / acts | scheme                                     | p_b | T_mul |
|----------------|--------------------------------------------|-----|-------|
| W2/A2          | filter, 3 taps on 18 bit, 5 acts on 27 bit | 6   | 15    |
| W3/A2          | filter + overpack, 3 × 3, GB = 3           | 7   | 9     |
| W3/A2          | filter, 3 taps × 4 acts on 27 bit, GB = 2  | 7   | 12    |
| W4/A4          | filter, 3 × 2, GB = 1                      | 9   | 6     |
| W3/A3          | filter, 2 taps × 4 acts on 27 bit, GB = 1  | 7   | 6     |
| W8/A8          | filter, 1 tap × 2 acts on 27 bit, GB = 1   | 17  | 2     |
| W2/A3 (1×1)    | kernel, ND = 2, NE = 2, GB = 2             | 7   | 4     |

## 2. Processing elements

`kernel_pack_pe`, `filter_pack_pe`, `opsep_filter_pe`, `lut_mac_pe` and
`lut_filter_pe` share the same timing:

* one input beat per cycle, qualified by `in_valid`;
* `first` starts a DSP accumulation and `last` ends it;
* the decoded result block appears with a one-cycle `out_valid`, exactly
  **4 cycles** after the `last` beat.

The 4 cycles are the DSP's input, product and P registers plus one output
register. `lut_mac_pe` computes the same ND × NE block as `kernel_pack_pe`,
with LUT multipliers and one accumulator per product. `lut_filter_pe` does
the same for `filter_pack_pe`: KP × NP LUT multipliers, then one adder per
coefficient that also accumulates. Because the interface and latency match,
a stage can mix DSP and LUT PEs freely. Its parameter PF_LUT sets how many
of its PF PEs are LUT PEs. This is how a stage trades DSPs for LUTs.

Each PE checks its packing constraints at elaboration (`$error`). Each PE
also asserts in simulation that no accumulation is longer than its guard
bits allow.

## 3. Layer stages

### `conv3x3_stage`: 3 × 3 convolution with filter packing

The stage takes one H × W frame as a pixel stream. Each beat carries all CIN
channels of one pixel, in row-major order. The frame goes into a frame
buffer. For each output row, the stage works as follows:

1. The 3 × 3 kernel is split into three 3-tap rows. Each row is convolved
   along a zero-padded input row `s[0..W+1]`.
2. The padded row is cut into NCH = ⌈(W+2)/NP⌉ chunks of NP activations.
3. For each chunk, a PE gets one beat per (input channel, kernel row) pair,
   3·CIN beats in all. When KP < 3, each kernel row is split into
   NSUB = ⌈3/KP⌉ sub-filters, and the beats become 3·CIN·NSUB. Sub-filter u
   holds taps u·KP onwards. It is paired with the chunk's activations
   shifted left by u·KP positions. Its coefficients therefore land on the
   same indices as those of sub-filter 0, and everything that follows is
   the same for every KP. The DSP sums groups of ACC_N beats. A wide
   accumulator sums the decoded group results.
4. When a chunk is complete, its first KP−1 coefficients are added to the
   KP−1 carried from the previous chunk. This is the overlap-add of
   intermediate coefficients.
5. The chunk's first NP sums are final outputs: padded index g is output
   column g−2. The stage applies BN/ReLU/quantisation to them and writes them
   to the row buffer. The chunk's last KP−1 sums are carried into the next
   chunk.

The PF PEs compute PF output channels at once from the same activations.
The first PF_LUT of them can be LUT PEs (not with operand separation). The
loop order, from outer to inner, is output-channel group, chunk, input
channel, kernel row, sub-filter.

States: LOAD (H·W cycles), then for every row RUN, DRAIN and OUT. RUN issues
one beat per cycle and never stalls. DRAIN waits out the 4-cycle PE latency.
OUT streams the W result pixels and is the only state that waits on the
consumer. With a ready consumer, a row takes

    (COUT/PF) · ⌈(W+2)/NP⌉ · 3·CIN·⌈3/KP⌉  +  PE_LAT + 1  +  W   cycles.

### `pw_conv_stage`: 1 × 1 convolution with kernel packing

The stage collects ND pixels. For each group of PF·NE output channels, it
then issues CIN beats. Each beat carries one input channel of the ND pixels
and the matching weights of NE output channels per PE. Of the PF PEs, the
first PF_LUT are LUT PEs and the rest are DSP PEs. A group of ND pixels takes `ND + COUT/(PF·NE)·CIN + PE_LAT + 1
+ ND` cycles. A frame must contain a multiple of ND pixels.

### `bn_relu_quant`

Batch normalisation is folded into an integer scale and bias per output
channel:

    y = clamp((acc·scale + bias) >>> SHIFT, 0, 2^OB − 1)

The lower clamp is the ReLU. The upper clamp saturates to the next layer's
activation width.

### Configuration

Weights and BN parameters are written through a simple write port:
`cfg_we`, `cfg_sel` (0 weight, 1 BN scale, 2 BN bias), `cfg_addr` and
`cfg_data`. In the 3 × 3 stage, weight `w[oc][ic][ky][kx]` is at address
`((oc·CIN+ic)·3+ky)·3+kx`. In the 1 × 1 stage, `w[oc][ic]` is at
`oc·CIN+ic`. The BN scale and bias take the output channel as the address.
Write all parameters before sending a frame.

## 4. The example accelerator `mixq_accel`

| stage | layer          | weights/acts in → out | packing                                                | PF  | DSPs |
|-------|----------------|-----------------------|--------------------------------------------------------|-----|------|
| S0    | 3×3, 3 → 8 ch  | W5 / A8 → A2          | operand separation, 3 taps × 1 act per DSP pair        | 2   | 4    |
| S1    | 3×3, 8 → 8 ch  | W3 / A2 → A3          | filter packing 3 × 3, 1-bit overpacking, ACC_N = 2; one LUT PE | 2   | 1    |
| S2    | 1×1, 8 → 8 ch  | W2 / A3 → A8          | kernel packing 2 × 2, ACC_N = 4; one LUT PE            | 2   | 1    |

The stages are linked by 64-deep FIFOs. The default frame is 32 × 32 × 3,
the size of a CIFAR-10 image. Input and output are ready/valid pixel streams;
a DMA engine would drive them in a full system.

The `cfg_stage` input selects which stage a configuration write goes to.

S0 is the bottleneck. Its frame period is
`H·W + H·(4·34·9 + 5 + W)` = 41 376 cycles at the default size. S0 accepts
the next frame only after it has emitted its last row, so `in_ready` is low
for most of each frame. The FIFOs fill whenever S1 is still busy with the
previous frame.

The widths, packings and parallel factors are an example chosen to exercise
every mechanism. They are not the result of a per-network search. To build a
different network, chain more stages with their own parameters.

## 5. How far it can be trusted, and where it differs from the source design

Verified in simulation: every module has a self-checking testbench against an
independent integer reference. Each testbench also checks the cycle counts
given above. The top-level test runs two 32 × 32 frames through all three
stages with random weights and back-pressure, and compares all 16 384 output
values.

Departures and limits:

* The source design is an HLS template. This RTL re-creates its arithmetic,
  not its exact micro-architecture. The frame buffer, the loop order, the
  configuration port and the stream format are choices made here. Line
  buffers would be the usual streaming alternative to the frame buffer.
* A stage works on one frame, and one output row, at a time. It does not
  compute while it streams out a row.
* The 3 × 3 stage divides only the kernel row, into 1 to 3 taps per DSP.
  Kernels of other sizes are not built.
* Operand separation, of the weight or of the activation, is built for
  filter packing only. Kernel packing has no separated variant.
* There are no pooling, depth-wise, fully-connected or strided layers. The
  three-layer top is therefore an example, not UltraNet, SkyNet or the
  VGG-style network used to evaluate the approach.
* The BN arithmetic (integer scale, bias, truncating shift) and all widths
  of sums and parameters are choices made here.
* `dsp_mul` is plain RTL that a synthesis tool maps onto a DSP block. It does
  not instantiate a vendor primitive.

## 6. Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops. Build and
run one with Verilator 5, for example the end-to-end test:

    verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb \
        rtl/mixq_pkg.sv tb/tb_mixq_accel.sv --top-module tb_mixq_accel
    ./obj_dir/Vtb_mixq_accel

Unit tests: `tb_dsp_mul`, `tb_pack_decoder`, `tb_kernel_pack_pe`,
`tb_lut_mac_pe`, `tb_filter_pack_pe`, `tb_lut_filter_pe`, `tb_opsep_filter_pe`,
`tb_bn_relu_quant`, `tb_stream_fifo`, `tb_conv3x3_stage` and
`tb_pw_conv_stage`. They use the helper harnesses `tb_kpe_harness`,
`tb_fpe_harness`, `tb_conv_harness` and `tb_pw_harness`, which drive a
module with random data and hold the reference models. The end-to-end test
takes about two minutes; the others take seconds.

To try another packing, change a harness's parameters in its testbench. An
impossible combination stops at elaboration with a message naming the port
that overflows.

## Files

| file                                      | contents                                            |
|-------------------------------------------|-----------------------------------------------------|
| `rtl/mixq_pkg.sv`                         | DSP port widths, PE latency, configuration selector |
| `rtl/dsp_mul.sv`                          | 27 × 18 multiply-accumulate                         |
| `rtl/pack_decoder.sv`                     | segment decoding, overpacking correction            |
| `rtl/kernel_pack_pe.sv`                   | kernel-packing PE                                   |
| `rtl/filter_pack_pe.sv`                   | filter-packing PE                                   |
| `rtl/opsep_filter_pe.sv`                  | operand-separated filter PE                         |
| `rtl/lut_mac_pe.sv`                       | LUT PE standing in for `kernel_pack_pe`             |
| `rtl/lut_filter_pe.sv`                    | LUT PE standing in for `filter_pack_pe`             |
| `rtl/bn_relu_quant.sv`                    | BN, ReLU, requantisation                            |
| `rtl/stream_fifo.sv`                      | inter-stage FIFO                                    |
| `rtl/conv3x3_stage.sv`, `pw_conv_stage.sv` | layer stages                                        |
| `rtl/mixq_accel.sv`                       | three-stage example accelerator                     |
