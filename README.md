# One datapath for regular and depthwise convolution

This is an inference accelerator for compact CNNs such as MobileNet-style backbones and face detectors. Those networks interleave depthwise and pointwise layers.

Many accelerators keep their multipliers busy on regular convolutions but leave most of them idle on depthwise layers. A depthwise layer has no sum across input channels to spread over the hardware. This design runs both kinds of layer on the same 512 multipliers:

- 8 convolution cores (`PE_NUM`) of 64 multiply-accumulate units each (`MAC_PE`).
- 8-bit feature maps and weights.
- Kernels up to 7×7, with dilation and stride.

The only difference between the two kinds of layer is what the eight cores are given:

| mode | what all cores share | what each core gets | what a step produces |
|---|---|---|---|
| regular | one input channel's 8×8-output input block | the weights of its own output channel | partial sums that are accumulated over all input channels |
| depthwise | nothing | its own channel's input block and kernel | eight finished output blocks |

Each core multiplies one weight by 64 pixels per cycle and walks the kernel one position per cycle. So a step costs K·K cycles in either mode, every multiplier is busy in both, and a large kernel costs time in proportion to its area, with no extra hardware. The price is a buffer that holds eight input blocks at once, one per core, for the depthwise case.

The architecture, the two modes, the loop order, the core counts, the memory sizes and the 7×7 limit come from the source publication. It describes these blocks only at the level of what they do. The memory layout, the buffer organisation, the handshakes, the quantization arithmetic, the pooling, the layer table and all widths are this implementation's own. They are marked as such below and in each file's header.

## Block diagram

```
   host ──► feature map memory (4 MB, 32-byte words) ◄──────────── write-back ──┐
   host ──► weight memory (2 MB, 8-byte words)                                   │
                 │ read              │ read                                      │
                 ▼                   ▼                                           │
           address_generator ── tags ──►  clpu_buffer (2 banks × 8 blocks)       │
                 ▲                              │ 8 × (64 pixels + 1 weight)     │
                 │                              ▼                                │
           control_unit ◄── idle ──────   8 × conv_core (64 MACs)   = clpu       │
           (layer table)                        │ 8 × 64 sums, valid/ready       │
                 └────────── cfg ─────────►   aplpu  (ReLU, quantize, pool) ─────┘
```

| file | block |
|---|---|
| `rtl/cnn_pkg.sv` | constants, the layer descriptor `layer_t`, the step descriptor `step_t`, the fetch tag `fm_tag_t`, size functions |
| `rtl/fm_memory.sv` | feature map memory: one read port, one write port with byte enables, one-cycle read |
| `rtl/weight_memory.sv` | weight memory: one word = one weight for each of the 8 cores |
| `rtl/address_generator.sv` | the layer's loop nest; fetches the input blocks and weights of each step into a buffer bank |
| `rtl/clpu_buffer.sv` | two banks of 8 input blocks (21×21 pixels) and 49 weight words; window selection with dilation and stride |
| `rtl/conv_core.sv` | 64 multipliers and 64 accumulators; multiply stage, then accumulate stage |
| `rtl/clpu.sv` | buffer plus 8 cores; kernel-position sequencing, result register, valid/ready to the APLPU, stall |
| `rtl/aplpu.sv` | ReLU, rounding shift, int8 saturation, optional 2×2 max pooling, write-back |
| `rtl/control_unit.sv` | table of 16 layer descriptors; runs them in order, checks each one, flags mode switches |
| `rtl/accel_top.sv` | the whole accelerator with host ports |

## A layer as a sequence of steps

The output map is cut into 8×8 blocks, one output pixel per MAC of a core. A *step* is one bank's worth of buffer contents. The address generator runs this loop nest:

```
regular:    for g  in groups of 8 output channels        (ceil(OC/8))
              for (by, bx) in output blocks, row-major
                for n in input channels                   -> step: block of channel n,
                                                             weights of channels 8g..8g+7 for input n
depthwise:  for (by, bx) in output blocks
              for g in groups of 8 channels               -> step: blocks of channels 8g..8g+7,
                                                             their own kernels
```

In regular mode the first step of an output block clears the accumulators, and the last step (n = IC−1) completes them. In depthwise mode every step is both first and last.

The published loop listing counts the outer regular loop over single output channels. Its accompanying text and its cycle formula both count groups of eight, and the RTL follows the groups.

The number of cycles in which the cores compute is therefore exactly

- regular: T_C = K·K · IC · ceil(OC/8) · (number of output blocks)
- depthwise: T_C = K·K · ceil(OC/8) · (number of output blocks)

Both testbenches of the whole design check this cycle count for every layer.

## The input block buffer

For an 8×8 output block, stride S and dilation D, the input block has edge

    IB(K, D, S) = 7·S + (K − 1)·D + 1

A bank holds eight such blocks of at most 21×21 pixels. That is enough for 7×7 at stride 2, or for 3×3 at stride 2 with dilation 3.

- **Parameter limits.** The control unit rejects a layer whose IB exceeds 21. Stride is 1 or 2, dilation 1–3 and padding 0–3.
- **How a bank is filled.** The address generator first clears the bank. It then reads the block row by row: one 32-byte word per cycle, one or two words per row. Each word carries a tag with the bank, slot, buffer row, the buffer column of its byte 0, and a byte mask.
- **Padding.** Rows above or below the map are never read. Bytes beyond the map's right edge are masked off. Whatever is not written stays zero, which is the zero padding.
- **Weights.** Weights arrive at the same time over the weight port, one word (8 weights) per kernel position.
- **Commit.** When both streams finish, the bank is committed together with its step descriptor.
- **Reading.** For kernel position (ky, kx), core p reads the 64 pixels at `(oy·S + ky·D, ox·S + kx·D)` of its slot: slot 0 in regular mode, slot p in depthwise mode. It also reads byte p of the weight word.

There are two banks: while the cores walk one, the next step is fetched into the other. This is the overlap of transfer and computation in the published time chart.

## Convolution cores and the result handoff

A core registers the 64 products in one cycle and adds them into its accumulators in the next. The accumulators are 32 bits wide. That holds 49 taps × 1024 channels × 2^14 without overflow.

When a step that completes its sums issues its last kernel position, the CLPU reserves its single result register. The sums are copied there two cycles later and offered to the APLPU with `res_valid`/`res_ready`.

If another completing step reaches its last kernel position while the register is still taken, that position is held back and `stall` is high for each cycle lost. Accumulation steps that complete nothing are never held back.

An assertion checks that a result is never overwritten before it is taken.

## Activation, quantization and write-back

The publication names only ReLU, "quantization" and pooling. The APLPU turns a 32-bit sum `v` into an 8-bit pixel as follows:

1. ReLU (`cfg.relu`): negative becomes 0.
2. If `shift > 0`: `v = (v + 2^(shift−1)) >>> shift`, which rounds half up.
3. Saturate to −128..127; `sat` pulses once per block in which this happened.
4. Optional 2×2 max pooling with stride 2 (`cfg.pool`), which makes the block 4×4.

There is no bias and no other activation. The block is written back one row of one channel per cycle: 8 pixels into one 32-byte word, with byte enables.

Rows below the map, pixels right of it and channels ≥ OC are not written. A block occupies the unit for 1 + 8·8 cycles after the handshake (1 + 8·4 pooled). Write-back overlaps the next block's computation.

## Memory layout

A feature map tensor is channel-planar and row-major, 32 pixels per word, and every row starts on a word:

    word(c, y, x) = base + c·ch_pitch + y·row_pitch + x/32,   byte = x mod 32

`row_pitch` ≥ ceil(W/32) and `ch_pitch` ≥ row_pitch·H are free per layer. So a layer can write its output into any part of a larger tensor, for example to concatenate channels.

Byte j of a weight word is the weight for core j:

    regular:    word = w_base + (g·IC + n)·K·K + ky·K + kx    (output channel 8g+j, input channel n)
    depthwise:  word = w_base + g·K·K + ky·K + kx              (channel 8g+j)

Channels of a last, partial group of 8 may hold anything; their outputs are not written.

## Programming a network

The host does the following while `busy` is low:

1. Write the input map through `host_fm_*` and the weights through `host_w_*`.
2. Write up to 16 `layer_t` descriptors (`cfg_we`, `cfg_addr`, `cfg_data`).
3. Pulse `start` with `num_layers`.

The control unit then runs the layers in order:

- A layer starts only when the previous one has been written back completely.
- `mode_switch` pulses when a layer's mode differs from the previous layer's.
- A descriptor the hardware cannot run sets `error` and is skipped: input block over 21, kernel 0, stride other than 1 or 2, depthwise with IC ≠ OC, or an empty output.

`done` pulses at the end. While `busy` is high the accelerator owns both memories and host accesses are ignored. `mac_active`, `stall`, `mode_switch` and `sat` are one-cycle event outputs for performance counters.

A descriptor holds:

- mode, relu, pool, K, dilation, stride, padding;
- input H and W, IC and OC;
- input and output base and pitches;
- the weight base;
- the quantization shift.

## How fast it is, and where that departs from the ideal

The core-busy cycles equal T_C exactly. The time of a step is not just K·K, though:

    step = max(K·K, rows × words-per-row × blocks) + 4 cycles

- **Rows × words-per-row × blocks.** This is fetching the input block: IB rows, one or two words each, for 1 block (regular) or 8 blocks (depthwise).
- **K·K.** Loading the weights takes K·K cycles.
- **+4.** Bank handling costs 4 cycles: wait, clear, the last load cycle and commit.

The published memory-time formula uses ideal transfer rates and never gives the bandwidths. Compared with that ideal:

- Regular layers with K ≥ 5 are compute-bound with about 4 cycles of overhead per step.
- Regular 3×3 layers are fetch-bound: 10 rows + 4 against 9 cycles.
- Depthwise layers are strongly fetch-bound: 8 blocks × 10 rows + 4 ≈ 84 cycles per 9-cycle 3×3 step.

Closing that gap needs a wider or channel-banked feature map port. That would be the first thing to change for throughput. Measured on the comparison shapes (IC = OC = 64, one 8×8 output block):

| layer | T_C = core-busy cycles | total cycles |
|---|---|---|
| regular 5×5 | 12,800 | 14,947 |
| depthwise 5×5 | 200 | 899 |
| regular 3×3 | 4,608 | 7,251 |
| depthwise 3×3 | 72 | 755 |

Clock rate, area and gate count are not established for this RTL: no timing analysis or complete synthesis was run. The published figures are 400 MHz in 28 nm, and 1.50 M gates for the convolution unit and 0.47 M for the activation unit.

## Capacity

At its default sizes the design holds:

- the convolution layers of a MobileNetV1-0.25 face detector at 640×480;
- ImageNet-size MobileNetV1-0.25 with 3×3, 5×5 or dilated 3×3 (rates 2 and 3) depthwise filters;
- any depthwise or regular layer up to 7×7.

For the face detector's 8→16 layer at 320×240, the largest input-plus-output pair is about 1.8 MB. The model is 1.1 MB of weights.

What a full detector additionally needs and this design lacks:

- bias;
- leaky ReLU;
- nearest-neighbour upsampling;
- element-wise addition;
- global average pooling;
- box decoding and non-maximum suppression.

These would run on a host processor or need new APLPU functions.

## Verification

Every block has a self-checking testbench in `tb/`. Each one compares against values computed independently in the testbench and ends with a `TB_RESULT checks=N failures=M` line:

| testbench | what it checks |
|---|---|
| `tb_fm_memory`, `tb_weight_memory` | read latency, byte enables, random traffic against a model |
| `tb_conv_core` | sums and the `done` timing for random sequences with clear/final |
| `tb_clpu_buffer` | every core's window for many kernel positions, dilations and strides, both modes and banks; weights, commit, release, clear |
| `tb_clpu` | complete regular and depthwise blocks, stalls under a slow consumer, cycle counts |
| `tb_address_generator` | every address, tag and mask of small layers with padding and edges, step order |
| `tb_aplpu` | ReLU, rounding, saturation, pooling, edge masking, write addresses, timing |
| `tb_control_unit` | layer sequencing, the wait for drain, rejection of bad layers, mode-switch pulses |
| `tb_accel_top` | a 5-layer network on a 13×13×3 input at default sizes (see below) |
| `tb_fig_comparison` | the four 64-channel comparison layers, outputs and cycle counts |

`tb_accel_top` runs a five-layer network covering:

- regular 3×3 with padding;
- depthwise 5×5;
- depthwise dilated 3×3 at stride 2;
- a saturating, pooled 1×1 layer;
- depthwise 7×7.

It checks every output pixel against a reference model and the core-busy cycles of every layer against T_C. It also requires that mode switches, stalls and saturation each occur. It takes about 2,650 cycles.

Each testbench was also run against a deliberately broken copy of its module and reported failures. The faults were:

- byte enables ignored;
- dilation ignored;
- top padding dropped;
- the rounding constant removed;
- invalid layers not skipped;
- the stride input tied to 1.

## Simulating

With Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl rtl/cnn_pkg.sv rtl/*.sv tb/tb_accel_top.sv \
          --top-module tb_accel_top -o sim
obj_dir/sim
```

The testbenches use only `$urandom` and need no data files. To change the size, edit the constants in `rtl/cnn_pkg.sv`:

- `PE_NUM` and `OB` (MAC_PE = OB²);
- `KMAX` and `IB`, which must cover the largest block you want to accept;
- the memory words.

The descriptor field widths are sized for a 640-pixel map and 80 blocks per row.
