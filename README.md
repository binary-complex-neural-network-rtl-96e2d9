# A binarized complex neural network accelerator in SystemVerilog

A binarized complex neural network (BCNN) keeps the activations and weights of
its inner layers as complex numbers. It then cuts each real and imaginary part
down to a single sign bit. A complex multiply-accumulate over 128 complex
channels becomes one XOR and one population count over a 256-bit word. The
networks are small enough that every intermediate feature map stays in on-chip
RAM.

This RTL builds an inference kernel around that XOR/popcount convolution. The
kernel takes a 32×32 RGB CIFAR-10 frame and returns ten class scores and the
winning class. The top level places nine such kernels side by side, each
working on its own frame.

The chain inside one kernel:

```
RGB frame ─► complex input generation ─► full-precision complex conv (3 → 128)
          ─► binarize ─► [ binarized complex layer ] × N ─► full-precision complex conv
          ─► global average pool ─► fully connected ─► class
```

Each binarized complex layer is built from these stages:

```
XOR/popcount conv ─► 2×2 average pool (optional) ─► complex batch norm (CGBN)
                  ─► quadrant binarize + channel pruning ─► residual add (optional)
```

## Bits, signs and the popcount offset

**One binary value is one bit.** Bit 0 means +1 and bit 1 means −1, which is
the sign bit of the value before binarization. With this code, the product of
two binary values is the XOR of their bits.

**Word layout.** A feature-map pixel is one 256-bit word:

- bits 0..127 hold the real parts of the 128 complex channels;
- bits 128..255 hold the imaginary parts.

**Convolution.** A 1×1 binarized convolution produces output channel `j` as

    Y[j] = offset − 2·popcount(X ⊕ W[j])

`X` is the pixel word and `W[j]` is the 256-bit weight row of output `j`.
If all 256 bits take part, `offset = 256` gives the ±1 dot product exactly.

**The complex product.** A complex product is a 2×2 real matrix,
`[y_r; y_i] = [w_r −w_i; w_i w_r]·[x_r; x_i]`. So each complex output channel
needs two weight rows:

- rows 0..127 produce the real outputs: `(w_r, −w_i)` against `(x_r, x_i)`;
- rows 128..255 produce the imaginary outputs: `(w_i, w_r)`.

The minus sign is just the inverted bit. All of this is worked out offline when
the rows are written. The hardware sees only 256 identical XOR/popcount rows.

**Pruning.** Channel pruning is applied when a layer binarizes its output. A
pruned channel is forced to bit 0. Its weight bits in the next layer are also 0.
It therefore adds nothing to the popcount, and the convolution never skips a
beat.

The `offset` field of each layer is the number of input bits that are *kept*.
With half the channels pruned (the usual ratio in the reference networks) it is
128. That is the constant printed in the reference HLS code.

## The convolution engine (`bc_conv2d`)

The engine walks the pixels of a layer in raster order. For each pixel it
produces the outputs in groups of `P` (16 by default):

- `P` weight banks are read in parallel, and bank `b` holds rows `b, b+P, b+2P, …`;
- `P` lanes compute XOR, popcount and offset;
- after `256/P` groups, a collector holds all 256 16-bit results of the pixel
  and hands them on over a valid/ready interface.

**Timing.** The engine issues one group per clock (initiation interval 1). It
fetches the next pixel's word while it runs the last group of the current one,
so a layer of `n` pixels takes `n·256/P` clocks plus a few clocks of fill.

**Stalls.** The engine stalls only when the consumer holds `vec_ready` low. In
the kernel the downstream stages keep pace, and the tests check that the stall
count is zero.

The lane count `P` is the one free knob of throughput. The reference design
leaves its unroll factor open, and 16 is this design's choice.

## One binarized layer, stage by stage

A pixel vector leaves the engine as 256 signed 16-bit sums. It then passes
through these stages:

1. **Average pool** (`avg_pool`), optional per layer.
   - It uses a 2×2 window with stride 2.
   - A half-width line buffer holds the partial sums of the even row.
   - An output is issued on each odd row and odd column, as the floor of the sum divided by 4.
   - When pooling is off, the vector passes straight through.
2. **CGBN** (`cgbn`), eight complex lanes per clock.
   - Sum `c` is the real part and sum `c+128` the imaginary part of complex channel `c`.
   - The unit computes
     `s = (x_r − μ_r)·k_r − (x_i − μ_i)·k_i`, then `y_r = γ_r·s + β_r` and `y_i = γ_i·s + β_i`.
   - `k = 1/√(2δ²+ε)` is folded offline.
   - The unit takes one clock and saturates to Q8.8.
   - Eight lanes over 16 clocks per pixel match the convolution's 16 clocks per pixel.
3. **Quadrant binarization** (`quad_binarize`).
   - It takes the sign of each part (0 counts as +1) and ANDs it with the layer's keep mask.
   - The results are assembled into a 256-bit word.
4. **Residual add** (`residual_add`), optional per layer.
   - Two ±1 values are added and the sum is binarized again with sign(0)=+1. The result is −1 only when both are −1.
   - With bit 1 = −1, that is a bitwise AND with the shortcut word, which is read from another activation buffer.
5. The word is written to the layer's destination buffer.

## Four buffers and a layer table: how residual blocks are run

The kernel has four activation buffers, each 1024 × 256 bits. It also holds one
table entry per layer (`layer_cfg_t`):

| field | meaning |
|---|---|
| `src` | buffer the layer reads |
| `dst` | buffer the layer writes |
| `res`, `res_en` | buffer added as a residual, and whether the add is on |
| `pool_en` | 2×2 average pool on or off |
| `offset` | kept input bits, used in the popcount offset |

Each buffer remembers the side length of the map it holds. A pooled layer writes
a map of half the side. The next layer's pixel count is taken from the buffer it
reads. This matters for a block whose shortcut has its own convolution, because
the shortcut reads the block input, not the previous layer's output.

A plain block (two layers and an identity shortcut):

```
L0: src A → dst B
L1: src B → dst C, residual A       (C = L1(L0(A)) + A)
```

A block with a convolution on the shortcut (two layers on one path, one on the
other):

```
L0: src A → dst B          (shortcut layer, output kept in B)
L1: src A → dst C
L2: src C → dst D, residual B
```

A NIN-style network is a plain chain that ping-pongs between two buffers. The
table holds up to `MAX_LAYERS` = 20 layers, which is enough for the 19
binarized layers of a ResNet-18 with three projection shortcuts. An assertion
flags a table entry whose `src`, `dst` and `res` are not all different.

## Front end and back end

**Complex input generation** (`complex_input_gen`) computes the imaginary part of
the input image, since the RGB image has only a real part.

- It runs two layers of batch norm (folded to `a·x+b`), ReLU and a 1×1 convolution, 3 → 3 channels.
- The result becomes the imaginary part, and the original RGB is the real part.
- Pixel bytes are read as Q8.8 values in [0, 1).

**The first full-precision layer** (`fp_complex_conv`, 3 → 128 complex channels)
uses 16 complex MAC lanes.

- Each lane computes `y_r += w_r·x_r − w_i·x_i` and `y_i += w_i·x_r + w_r·x_i`.
- After the MACs come the bias and then ReLU or Hardtanh (`nonlinear`). A global mode bit selects between them.
- Its output is binarized into buffer 0. The keep mask in table slot 0 applies here.

**The back end** maps each bit of the last layer's buffer to ±1.0 and runs a
second `fp_complex_conv` (128 → 16 complex channels).

- A global average pool (`global_avg_pool`) reduces the map to 32 features.
- The fully connected layer (`fc_layer`) evaluates one class per clock and then
  picks the arg-max. On a tie, the lowest index wins.

## Many kernels (`bcnn_top`)

`bcnn_top` instantiates `NUM_KERNELS` = 9 kernels.

- **Loading.** Weights, CGBN parameters, masks and layer tables go to every
  kernel at once over the host write bus. Image pixels go only to the kernel
  named by `hw_kernel`.
- **Running.** Each kernel is started separately.
- **Results.** When a kernel finishes, its class and scores are written to a
  prediction RAM at the kernel's index, and its `result_valid` bit is set.
  `start` clears that bit again. If several kernels finish in the same clock,
  they are written one per clock, lowest index first.

Each kernel keeps its own copy of all weights. This replicates memory but lets
the kernels run out of step.

### Host write bus

A write is a `host_wr_t`: `{en, sel, addr[15:0], data[255:0]}`.

| `sel` | target | `addr` | `data` |
|---|---|---|---|
| 0 `HW_IMG` | image pixel | pixel 0..1023 | `{B,G,R}`, 8 bit each |
| 1 `HW_BWGT` | binary weight row | layer·256 + output row | 256-bit row |
| 2 `HW_BN` | CGBN parameters | layer·128 + complex channel | `{μ_r, μ_i, k_r, k_i, γ_r, γ_i, β_r, β_i}`, 16 bit each, `μ_r` in the top bits |
| 3 `HW_MASK` | keep mask | 0 = first layer, l+1 = layer l | 256 bits, 1 = kept |
| 4 `HW_CFG` | layer table | layer | `layer_cfg_t` |
| 5 `HW_GLOBAL` | layer count, mode | – | `[4:0]` layers, `[5]` 1 = Hardtanh |
| 6 `HW_CIG` | input generator | stage·16 + idx (0..2 `a`, 3..5 `b`, 6..14 weights `o·3+c`) | Q8.8 |
| 7/8 | first fp layer weight / bias | out·4 + in / out | `{w_i, w_r}` / `{b_i, b_r}` |
| 9/10 | last fp layer weight / bias | out·128 + in / out | same |
| 11 `HW_FC` | FC weight or bias | class·64 + index, index 32 = bias | Q8.8 |

## Number formats and timing of a frame

- **Full precision.** Every full-precision value is a signed 16-bit Q8.8 number.
- **Products.** Products are rescaled by an arithmetic right shift of 8, which is floor rounding.
- **Saturation.** Every result that goes back to 16 bits saturates.
- **Binary layers.** The binary layers carry integer popcount sums up to ±256.

Approximate clock counts for one frame:

| Part | Clocks |
|---|---|
| Front end | about 28 per input pixel |
| Binarized layer | `npix·256/P` (16 384 for a 32×32 map at P = 16) |
| Back end | 130 per pixel of the final map |

The six-layer test network with three pooling layers takes about 71 000 clocks
per frame.

Memory dominates the size of a kernel: about 2.9 Mbit of RAM per kernel at the
default sizes. About 1.3 Mbit of that is the binary weight banks (20 layers ×
256 rows × 256 bits) and 1 Mbit is the four activation buffers. The logic around
it is about 32 000 flip-flop bits. Nine kernels need nine copies.

## Where this design departs from the reference design

- **Kernel size.** Only 1×1 convolutions exist, in both the binary and the
  full-precision layers. The reference accelerator's worked example is a 1×1
  layer, but the NIN and ResNet-18 networks it runs use 3×3 and 5×5 kernels.
  These networks therefore cannot be run as published. A spatial kernel would
  need a line-buffer window in front of `bc_conv2d` and wider weight rows.
- **Channel width.** 128 complex channels per layer, fixed by the 256-bit word.
  ResNet-18's last stage (256 complex channels) does not fit.
- **Downsampling.** Strided convolutions are replaced by 2×2 average pooling.
- **Imaginary part of the complex product.** The two written forms of the complex product in the
  reference disagree on the imaginary part's sign: one reads `x_r w_i − x_i w_r`, the matrix form reads `w_i x_r + w_r x_i`.
  This design uses the matrix form, which is the ordinary complex product.
- **Arithmetic.** Fixed point (Q8.8) replaces the floating point of the
  full-precision layers.
- **First-layer pooling.** The reference marks a pool in the full-precision
  layers as optional. The first full-precision layer here has none. Its output
  can be pooled by the first binarized layer instead, through that layer's
  `pool_en` bit.
- **Choices the reference leaves open.** This design chose:
  - the size of the complex input generator;
  - the width of the last full-precision layer;
  - the FC size;
  - the pool window;
  - the rounding;
  - the order of pruning and residual add.
- **Platform.** Host, PCIe and DRAM are outside this RTL. The host write bus
  and the prediction read port are where they would attach.

## Verification

Every module has a self-checking testbench in `tb/`. Each one compares against
values computed independently inside the testbench and prints
`TB_RESULT checks=N failures=M`.

The two system tests are `tb_bcnn_kernel` (one kernel) and `tb_bcnn_top`
(nine kernels). Both run at the default sizes and compare against a
behavioural model of the whole inference in `tb/bcnn_ref_pkg.sv`.

`tb_bcnn_top` covers:

- pooled, plain, residual and shortcut-convolution layers;
- pruned channels;
- both non-linearities;
- kernels finishing in the same clock;
- kernels started at different times.

It counts each of these mechanisms and fails if one never occurs. It also
checks that the convolution engine never stalls.

To simulate with Verilator (5.x), for example the top-level test:

```
verilator --binary --timing --assert --top-module tb_bcnn_top \
  rtl/bcnn_pkg.sv $(ls rtl/*.sv | grep -v bcnn_pkg) tb/bcnn_ref_pkg.sv tb/tb_bcnn_top.sv
./obj_dir/Vtb_bcnn_top
```

Unit tests need only the package, their module and its sub-modules. Passing all
of `rtl/` as above works for every test.

## Files

| File | Contents |
|---|---|
| `rtl/bcnn_pkg.sv` | shared sizes, types (`layer_cfg_t`, `bn_param_t`, `host_wr_t`), popcount and saturation |
| `rtl/bc_conv2d.sv` | XOR/popcount convolution engine |
| `rtl/avg_pool.sv`, `rtl/global_avg_pool.sv` | pooling |
| `rtl/cgbn.sv` | complex batch norm |
| `rtl/quad_binarize.sv` | binarization and pruning |
| `rtl/residual_add.sv` | residual add |
| `rtl/nonlinear.sv` | ReLU / Hardtanh |
| `rtl/complex_input_gen.sv` | complex input generation |
| `rtl/fp_complex_conv.sv` | full-precision complex convolution |
| `rtl/fc_layer.sv` | fully connected layer |
| `rtl/sdp_ram.sv` | on-chip RAM |
| `rtl/bcnn_kernel.sv` | one inference kernel |
| `rtl/bcnn_top.sv` | the multi-kernel top level |
