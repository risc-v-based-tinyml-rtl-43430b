# Fused inverted-residual accelerator for a RISC-V CFU

MobileNetV2 builds its network from *inverted residual blocks*. Each block is a
1x1 convolution that widens N input channels to M = 6N ("expansion"), a 3x3
depthwise convolution on those M channels, and a 1x1 convolution back down to a
few output channels ("projection"). If a block runs layer by layer, the two
M-channel intermediate maps (F1 after expansion, F2 after the depthwise step)
are the largest tensors in the block. On a microcontroller-class system, moving
them to memory and back costs more than the arithmetic does.

This design never stores F1 or F2. It computes the block one **output pixel**
at a time:

1. For output pixel (r, c) and one expanded channel m, the 3x3 neighbourhood of
   (r, c) in F1 is computed. This is nine 1x1 dot products over the N input
   channels.
2. That 3x3x1 tile is exactly what the depthwise kernel of channel m needs. It
   produces one value F2[r, c, m].
3. The value is broadcast to 56 projection accumulators. Each adds
   F2[r, c, m] times its own weight for channel m.

After m has run from 0 to M-1, the accumulators hold the finished output pixel.
F1 and F2 live only in pipeline registers, for a few cycles each. The price is
recomputation: every F1 value is computed up to nine times, once for each
output pixel whose window contains it. The hardware is sized so that this
costs no extra cycles, because the nine F1 values of a tile are computed in
parallel.

The accelerator is a Custom Function Unit (CFU): it hangs off a RISC-V core
(VexRiscv in a LiteX SoC), and the CPU drives it entirely with R-type custom
instructions. The top module `dsc_cfu` exposes the CFU-Playground
command/response bus. The CPU, the SoC buses and DRAM are not part of this RTL.

## Datapath

```
              IC: row, col, m, k ──────────────────────────────────────────────┐
                │                                                               │
   pad_addr_gen ─► ifmap_buffer ─► 3x3 tile (9 x 8 bytes)                       │
                   (9 banks)              │                                     │
   ex_weight_buffer ─► 8 weights ─► ex_unit: 9 x ex_engine (8-way MAC tree)     │
                                          │  9 x 32-bit, after N/8 chunks       │
                                   ex_post_process: 9 requantizers ─► F1 tile   │
   dw_weight_buffer (9 banks) ─► 9 weights ─► dw_engine (9 MACs) ─► 32 bit      │
                                   dw_post_process ─► F2[m] (8 bit)             │
                                   pr_unit: 56 x pr_engine (own weight RAM) ◄───┘
                                          │  56 x 32-bit after m = M-1
                                   pr_post_process ─► 56 bytes ─► CPU reads
```

The **Expansion Unit** (`ex_unit`) holds the tile's input pixels still and
streams the filters past them (input-stationary). In each cycle the nine
engines get their own pixel's 8-channel chunk k and the same 8 weights of
filter m. Each engine multiplies eight pairs and sums them in a three-level
tree. Its accumulator adds the N/8 chunk sums. All channel counts in
MobileNetV2 are multiples of 8, so no lane is ever idle.

The **Depthwise Unit** is one engine (`dw_engine`). It takes the nine F1 values
and the nine weights of channel m and produces the 3x3 result in one cycle.

The **Projection Unit** (`pr_unit`) has 56 engines. Each owns a small
distributed-RAM weight buffer that holds one output channel's M weights. Each
engine multiplies the broadcast F2 value by weight m and accumulates
(output-stationary). Layers with fewer than 56 output channels leave the upper
engines unused.

Each of the three stages is followed by a **post process** that adds the
per-channel bias and requantizes to int8. The expansion and depthwise post
processes also apply the activation clamp.

## The five-stage pipeline

The instruction controller (IC) issues one work item (row, col, m, k) per
cycle, in the order row, column, m, k (outermost first). An item passes through:

| stage  | work                                                                      |
|--------|---------------------------------------------------------------------------|
| issue  | window address/padding check, IFMAP window read, filter chunk read (registered BRAM reads) |
| S1     | Expansion MAC: nine 8-way dot products, accumulated over k                |
| S2     | Expansion Quantize: nine requantizers, padding positions forced to the F1 zero point |
| S3     | Depthwise MAC                                                             |
| S4     | Depthwise Quantize                                                        |
| S5     | Projection MAC                                                            |
| result | capture of the 56 accumulators, sequential requantization, CPU read       |

Stages S1 to S5 correspond to the five pipeline stages of the design's final
version. Only the item with k = N/8-1 leaves S1, so S2 to S5 see one F1 tile
every N/8 cycles. Items from consecutive channels and consecutive pixels follow
without a gap. Around a pixel boundary, the last channels of pixel i are
therefore still in S2 to S5 while pixel i+1 starts in S1.

Throughput is one expansion chunk per cycle, which gives **H*W*M*N/8 cycles per
layer**.

There is one stall condition. The result stage has a single hold register for
the 56 accumulators. When pixel i+1 finishes its last channel and pixel i is
still in the hold register, every stage freezes together (`en` low) until the
hold register frees. Pixel i is still there while it is being requantized or
while the CPU has not yet read its output. The requantization takes cout + 1
cycles. Pixel i+1 needs M*N/8 cycles, so the stall only appears when the CPU
reads late or the layer is very small.

## Memories and addressing

**IFMAP buffer.** The buffer has nine banks of 256 words of 64 bits (8 channels
of one pixel). Pixel (row, col) lives in bank (row mod 3)*3 + (col mod 3).
Because of this rule, any 3x3 window touches each bank exactly once, so one
cycle reads the whole window.

Inside a bank, the word address of chunk k of pixel (row, col) is

    ((row / 3) * ceil(W / 3) + col / 3) * (N / 8) + k

The address is computed per bank by `pad_addr_gen`. It also flags window
positions that fall outside the map. For those positions the buffer returns
the IFMAP zero point in all 8 bytes, so the expansion sees the zero-valued
padding of a quantized input without it being stored.

The depthwise convolution pads **F1**, not the input. For an out-of-map window
position, the F1 value must therefore be F1's own zero point. The expansion
post process substitutes it, using the same validity flags carried through S1.

**Expansion filter buffer.** This is one memory of 4096 x 64 bits. Filter m,
chunk k is at word m*(N/8) + k. One word is read per cycle and broadcast to
the nine engines.

**Depthwise filter buffer.** This has nine banks of 512 x 8 bits, one bank per
kernel tap (bank 0 = top-left, ..., bank 8 = bottom-right). One read returns
the whole 72-bit filter of channel m.

**Projection weights.** Each engine has a 512 x 8 distributed RAM, read
combinationally at address m.

**Bias buffers.** There are three per-channel parameter memories (`quant_param_buffer`):
expansion and depthwise with 512 entries, projection with 64 entries. Each
entry holds a 32-bit bias, a 32-bit multiplier and an 8-bit shift.

Capacity limits at the default sizes:

- `ceil(H/3)*ceil(W/3)*N/8 <= 256`
- `M*N/8 <= 4096`
- `M <= 512`
- `cout <= 56`
- `H, W <= 255`

## Arithmetic

All activations and weights are int8 with per-tensor zero points. Accumulators
are 32 bits. A MAC adds the input offset (minus the input zero point) to each
activation before multiplying, so weights are taken as symmetric.

Requantization (function `requant` in `dsc_pkg`) is the single-rounding form
of int8 TensorFlow Lite:

    s   = 31 - shift                       (clamped to 1..62)
    v   = ((acc + bias) * mult + 2^(s-1)) >>> s     (66-bit product, round half up)
    v   = saturate(v, -32768, 32767)
    y   = clamp(v + zero_point, act_min, act_max)

To get ReLU, set `act_min` = zero point and `act_max` = 127. To get ReLU6, set
`act_max` to the quantized value of 6. The projection stage is linear in
MobileNetV2, so its clamp is normally -128..127.

The projection post process has one requantizer. It quantizes one output
channel per cycle, reading that channel's parameters from the projection bias
buffer, and packs the results four per 32-bit word.

## Programming model

Every instruction is R-type: `function_id = {funct7, funct3}`, with rs1 →
`inputs_0` and rs2 → `inputs_1`. Every instruction returns a value in rd (0 if
it has nothing to return).

| funct3 | name   | operands                                                                                         |
|--------|--------|--------------------------------------------------------------------------------------------------|
| 0      | CFG    | funct7 = register, rs1 = value                                                                   |
| 1      | IFMAP  | rs2 = {hi[31], chunk[21:16], row[15:8], col[7:0]}, rs1 = 4 channels (hi selects channels 4..7)  |
| 2      | EXW    | rs2 = {hi[31], word[11:0]}, rs1 = 4 weights                                                     |
| 3      | DWW    | rs2 = {tap[19:16], m[8:0]}, rs1[7:0] = weight                                                   |
| 4      | PRW    | rs2 = {engine[21:16], m[8:0]}, rs1[7:0] = weight                                                |
| 5      | QPARAM | funct7[1:0] = stage (0 ex, 1 dw, 2 pr), funct7[3:2] = field (0 bias, 1 mult, 2 shift), rs2 = channel, rs1 = value |
| 6      | START  | run the layer                                                                                   |
| 7      | READ   | funct7 = 0: next output word (waits until one is ready); funct7 = 1: status {running, busy}      |

The CFG registers (by funct7) are:

| funct7 | register     |
|--------|--------------|
| 0      | H            |
| 1      | W            |
| 2      | N/8          |
| 3      | M            |
| 4      | cout         |
| 5      | ex_in_off    |
| 6      | dw_in_off    |
| 7      | pr_in_off    |
| 8      | ex_zp        |
| 9      | dw_zp        |
| 10     | pr_zp        |
| 11     | ex_min       |
| 12     | ex_max       |
| 13     | dw_min       |
| 14     | dw_max       |
| 15     | pr_min       |
| 16     | pr_max       |

The `*_in_off` registers hold minus the zero point of the stage's input. IFMAP
writes must come after W and N/8 are set, because the bank address depends on
them.

To run a layer:

1. Write the configuration.
2. Load the IFMAP, the filters and the per-channel parameters.
3. Issue START.
4. Issue ceil(cout/4) READs per output pixel, in raster order. Byte j of word i
   is output channel 4i + j.

A READ issued before its pixel is done simply waits. The core therefore never
polls, and it can run the block's residual addition on one pixel while the
accelerator computes the next.

On the bus, `cmd_ready` is low while a response is pending or a READ is
waiting. `rsp_valid` stays high until `rsp_ready`. Reset is synchronous and
active high.

## Sizes and timing for the benchmark blocks

The four MobileNetV2 bottleneck blocks below fit the default buffers. Each was
simulated end to end through the CFU bus against a bit-exact software model,
with the CPU reading every word as soon as possible.

| block          | H x W x N  | M   | cout | H*W*M*N/8 | cycles START → last word |
|----------------|------------|-----|------|-----------|--------------------------|
| 3rd bottleneck | 40x40x8    | 48  | 8    | 76,800    | 76,820                   |
| 5th            | 20x20x16   | 96  | 16   | 76,800    | 76,834                   |
| 8th            | 10x10x24   | 144 | 24   | 43,200    | 43,248                   |
| 15th           | 5x5x56     | 336 | 56   | 58,800    | 58,904                   |

The M values follow from the intermediate traffic of a layer-by-layer run
(H*W*M bytes for each of F1 and F2, each written and read once). The output
channel counts are those of MobileNetV2 with width multiplier 0.35. The
reference whole-system figures for these blocks (0.76 to 1.8 million cycles at
100 MHz) also include the CPU loading the buffers, reading the results and
doing the residual addition. Those steps are software here and not modelled.

## Where this RTL departs from, or adds to, the reference description

- **Instruction set, configuration registers, read protocol**: the reference
  description fixes only that the CPU uses R-type custom instructions and reads
  results explicitly. The encoding above is this design's own.
- **Requantization formula and parameter format**: the description names "bias
  addition, requantization and ReLU". The TensorFlow Lite arithmetic is this
  design's choice.
- **Depthwise filter width**: the description's text calls one 3x3 filter a
  72-bit word. Its memory diagram labels the bank entries "8 byte". This RTL
  follows the text: 9 banks x 8 bits.
- **F1 padding**: the description says out-of-bound accesses are replaced by
  the zero point. Here the IFMAP zero point is substituted at the buffer and
  the F1 zero point in the expansion post process. The second substitution is
  what makes the fused result equal to a layer-by-layer run with zero padding.
- **In-bank IFMAP address, projection weight depth (512), bias-buffer sizes,
  the single-requantizer result stage and its hold register**: these are this
  design's own choices.
- **Not supported**: stride 2, more than 56 output channels, and residual
  addition in hardware.

## Verification

Each module has a self-checking testbench in `tb/` that compares it with an
independent model (`tb_dsc_ref_pkg` holds the reference requantization). Each
testbench prints `TB_RESULT checks=<n> failures=<n>` and has a watchdog.
Timing is checked where this design defines it:

- S1 output one cycle after the last chunk.
- The result stage's cout + 2 cycle latency.
- The IC's exactly one item per non-stalled cycle.
- The end-to-end H*W*M*N/8 layer time.

`tb_dsc_cfu` runs the whole accelerator at its default sizes. It runs the
four blocks above and two small layers, one with ReLU6-style clamps and one
with a deliberately slow reader. It checks every output byte and counts that
each mechanism occurred:

- pipeline stall
- padded window positions
- multi-chunk accumulation
- pixels overlapping in the pipeline
- a READ waiting for data
- activation clamping

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/dsc_pkg.sv tb/tb_dsc_ref_pkg.sv rtl/*.sv \
          tb/tb_dsc_cfu.sv --top-module tb_dsc_cfu -Mdir obj && ./obj/Vtb_dsc_cfu
```

The same command with any other `tb/tb_<module>.sv` and `--top-module
tb_<module>` runs a unit test. The full end-to-end run takes about a second.

## Files

`rtl/dsc_pkg.sv` holds the sizes, types, configuration layout, bank/address
functions and the requantization function. Every other file in `rtl/` holds
one module named like the file, and `dsc_cfu` is the top. `tb/` holds one
testbench per module, plus the reference package.
