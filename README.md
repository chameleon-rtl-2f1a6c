# Chameleon core: a shift-only TCN accelerator that learns new classes on chip

This core runs temporal convolutional networks (TCNs) on streaming sequential
data such as audio, sensor traces or pen strokes, and classifies each sequence.
It can also learn a new class from a few examples without leaving the chip.
Two ideas make this cheap:

* **No multipliers.** Weights are signed powers of two (4-bit log2 codes) and
  activations are 4-bit unsigned numbers. Every "multiply" in the 16x16
  processing element (PE) array is therefore a left shift followed by a sign
  flip.
* **Learning is inference.** A prototypical network classifies a sample by
  its squared distance to each class's mean embedding (the class prototype).
  That distance expands into a dot product plus a per-class constant, which is
  exactly one output neuron of a fully connected (FC) layer. To learn a class,
  the core embeds k examples ("shots") with the network it already runs, sums
  them, and converts the sum into one more column of FC weights and one more
  bias. From then on, ordinary inference recognises the class. Doing this
  repeatedly gives continual learning: the FC layer grows by one neuron per
  learned class.

A third idea handles long sequences. The **greedy, dilation-aware scheduler**
computes each layer only at the timesteps whose outputs a later layer will
actually read. Each layer keeps only the few outputs still needed, in a small
FIFO in the activation memory. Memory therefore grows with network depth, not
with sequence length. The sequence length only sets a 16-bit timestep
counter.

The array has two sizes. In **16x16 mode** all 256 PEs run, for throughput
(learning, large embedders). In **4x4 mode** only the top-left 4x4 PEs run.
Their weights sit in always-on memory banks, so the rest of the weight and
bias memory can be powered off (low-leakage always-on inference, such as
keyword spotting).

## Block diagram and data flow

```
 SPI ──► spi_slave ──► config_regs ──► layer / global records
              │                      └► num_classes
              ├────► weight_memory (512 x 1024b)  ─┐
              ├────► bias_memory   (128 x 224b)   ─┤
              └────► activation_memory (256 x 64b)─┤
 in bus ─► input_bus ─► input_buffer (32 x 64b) ───┤
                                                   ▼
             network_address_generator ──► reads ─► pe_array (16x16 log2 PEs)
                          │                            │ 16 column sums
                          │                            ▼
                          │                     16 x ope (accumulate, bias,
                          │                     residual, ReLU, rescale)
                          │                       │          │        │
                          └── write-back ◄────────┘          │        │
                                                 argmax_tree ◄┘        │
 out bus ◄── output_bus ◄── class index         proto_extractor ◄──────┘
                                   learning_controller ──► weight/bias column write
```

Every cycle the array takes one row of 16 activations and one 16x16 weight
tile. Activation i is broadcast along PE row i. Column j adds its 16
products (16-bit signed) and feeds output PE (OPE) j. The 16 OPEs hold 18-bit
accumulators for one block of 16 output channels. In 4x4 mode, a block is 4
channels.

## Number formats

| quantity | format |
|---|---|
| activation | 4-bit unsigned, 0..15 |
| weight | 4 bits `{sign, exponent[2:0]}` = (-1)^sign x 2^exponent; code `4'b1000` means zero |
| PE product | 12-bit signed (15 << 7 = 1920 at most) |
| column sum | 16-bit signed |
| OPE accumulator | 18-bit signed, saturating |
| bias | 14-bit signed |

The zero code (`1000`, "minus one shifted by zero" in the natural reading) is
this design's addition. Unused channels and the identity matrices used for
residuals and for summing embeddings need a zero weight.

An OPE step is one of: load `bias + column sum` (the first tile of an output
block), add a column sum, add a residual column sum shifted right by
`res_shift`, load a column sum, clear, or hold. The activation written back
is `clip(ReLU(acc) >>> out_shift, 0, 15)`.

## The two array sizes and the memory layout

A weight-memory row holds one 16x16 tile (1024 bits). The row is not stored in
plain row-major order. The top-left 4x4 weights come first (row-major, 64
bits), then the remaining 240 weights row-major
(`chameleon_pkg::wslot(i, j)` gives the nibble position). Bits 63:0 form
always-on bank A, bits 127:64 always-on bank B, and bits 1023:128 sit in the
gateable MSB domain.

In 4x4 mode a tile has only 16 weights, so banks A and B are stacked into a
1024-row memory of 64-bit rows. Logical row r < 512 is row r of bank A;
logical row r >= 512 is row r-512 of bank B. The address generator is the same
in both modes; only the block width changes (16 or 4 channels). Positions
outside the 4x4 block read as zero, and `msb_pwr_en` goes low so an external
switch can cut the MSB supply. Bias rows split the same way: lanes 0..3 are
always-on half A (bits 55:0), lanes 4..7 half B (bits 111:56), and lanes
8..15 are gateable. In 4x4 mode, logical bias rows 128..255 map to half B.

Capacity: 131,072 weights in 16x16 mode and 16,384 in 4x4 mode.

## Greedy, dilation-aware scheduling

This is the part of the design that needs the most care when mapping a
network. The sections below describe exactly what the address generator
does.

### The walk

The generator keeps `g_next`, the next input timestep t (0..T-1 within a
sequence of length T). As soon as that input has fully arrived in the input
buffer, it walks up the layers from layer 0. Layer l is computed at t only if

```
final_only(l) ? t == T-1 : ((T-1-t) mod 2^stride_log2(l)) == 0
```

The walk stops at the first layer that is not needed. The generator then
advances to the next timestep and waits for its input. After t = T-1 the
sequence is over. In inference the final layer's blocks have gone through
the argmax tree and the class is sent; in learning the embedding has been
stored.

Set `stride_log2(l)` to the dilation exponent of the layer that reads layer
l. A layer with dilation 2^d reads its source at t, t-2^d, ..., t-(K-1)2^d.
If the source runs exactly every 2^d steps (counting back from T-1), those
taps are the K newest entries of the source's FIFO. Outputs that no later
layer reads are never computed or stored. Layers at the top of the network,
which feed only the final classification, are `final_only`. Dilations must not
decrease going up the network. A residual source must run at least as often
as the layer that reads it.

### FIFOs in the activation memory

Layer l owns `fifo_depth(l) x cout_blk(l)` rows starting at `a_base(l)`. Its
output for one timestep goes to slot `wr_slot(l)`, which advances after each
run and wraps. The oldest entry is overwritten. `fifo_depth` must be at least
the kernel size of the reading layer. The input buffer works the same way for
the network input: timestep n goes to slot n mod `in_depth`.

### Reads per output block

For output block `ob` of layer l, one read is issued per cycle:

1. for tap j = 0..K-1 and input block ib = 0..cin_blk-1: activation row
   `a_base(src) + slot(newest - j) * cout_blk(src) + ib` (or the input buffer
   for layer 0) with weight row `w_base + (ob*K + j)*cin_blk + ib`. The first
   of these loads the bias from row `b_base + ob`.
2. the residual, if any. An **identity** residual is one read of block `ob` of
   the residual source through the array with unit weights. A **1x1
   convolution** residual is `rin_blk` reads with weights from
   `wres_base + ob*rin_blk + ib`. Either way, each column sum is shifted right
   by `res_shift` before it is added.

A tap that would lie before the start of the sequence (t - j*2^d < 0) is fed
as zeros (causal padding). A run of layer l therefore takes
`cout_blk x (K*cin_blk + residual reads)` cycles. For an FC layer of V inputs
and N classes this is ceil(V/16)*ceil(N/16), as in the published design.

### Pipeline and the read/write stall

Stage 0 issues the memory reads. Stage 1 applies the OPE operation to the
returned data. Stage 2 writes the finished block back, or hands it to the
argmax tree. The activation memory is two-port and returns old data when a row
is read and written in the same cycle. If the next layer asks for a row whose
write is still in the pipeline, issue stalls until the write has landed. The
published design describes this as a one-cycle delay. With this three-stage
pipeline it is one or two cycles. It only happens when a layer is a single
read per block, such as a 16-wide FC layer right after another layer.

### Input flow control

The input buffer accepts a row of timestep n only while
`n < g_next + in_depth - K0 + 1` (K0 = kernel of layer 0). So an input never
overwrites one that layer 0 still needs. The input bus holds off its
acknowledge while a row waits, which pushes back on the sender.

## Learning a class

With learning mode on, every sequence is one shot of the class being learned.
Its embedding (the output of layer `emb_layer` at t = T-1, `V = vblk x 16`
values) is written to rows `emb_base + shot*vblk + ob` instead of the FIFO.
After the k-th shot the learning controller takes over the datapath. For each
16-value chunk c of the embedding it runs:

| step | cycles | action |
|---|---|---|
| SUM | k | shot s of chunk c passes through the array with identity weights; the OPEs load (s = 0) or add it, giving the sum s_c |
| LOD | 1 | 16 leading-one detectors latch l_i = floor(log2 s_i), saturated to 7; s_i = 0 gives 0 |
| WR | 1 | weight code `{0, l_i}` is written into column (class mod 16) of FC row `w_base(fc) + (class/16)*vblk + c`; the adder tree adds sum_i 2^(2 l_i) to the bias accumulator |

After the last chunk, a BIAS cycle writes
`-((sum 2^(2 l_i)) >> 2*ceil(log2 k))`, saturated to 14 bits, into lane
(class mod 16) of bias row `b_base(fc) + class/16`. The same cycle increments
the class count. One class costs (k+2)*ceil(V/16)+1 cycles after the last shot.
The index of the new class is then sent on the output bus as an
acknowledgement.

Why it works: let s be the sum of the k shot embeddings and m = s/k their
mean, the prototype. With the exact weights W = s and bias b = |s|²/(2k), the
FC output is x·W - b = k·(x·m - |m|²/2). Up to the positive factor k and the
term |x|²/2, which is the same for every class, this is minus half the squared
distance from x to m. The largest output is therefore the nearest prototype.
The chip rounds W to a power of two, 2^l. It divides by a right shift of
2·⌈log2 k⌉ bits, a division by 4^⌈log2 k⌉, which equals 2k only for k = 2.
For other k, the bias is scaled differently from the weights, so the nearest-prototype property holds
only approximately. This design follows the published shift as written.

The published equations for the exact and the log2 forms differ in sign
convention. This design keeps positive weights and a negated bias, so
"largest output" means "nearest prototype" and the ordinary argmax can be
reused.

The FC layer named by `fc_layer` sizes its output blocks from the live class
count (`ceil(num_classes/16)`). Lanes past the last class are masked out of
the argmax, so learned classes join inference at once. Classes can be loaded
over SPI first and then extended on chip (continual learning), up to 256
classes (the 8-bit output bus).

In 4x4 mode everything above works on 4-value chunks and 4-class blocks.

## Host interface

### SPI

Mode 0, MSB first. SCLK must be at most a quarter of the core clock (the pins
are oversampled). A frame is 64 bits while `cs_n` is low: a 32-bit header,
then 32 data bits.

| header bits | meaning |
|---|---|
| 31 | 1 write, 0 read |
| 30:28 | target: 0 registers, 1 weight memory, 2 bias memory, 3 activation memory |
| 27:23 | 32-bit chunk within the memory row (weights 0..31, biases 0..6, activations 0..1) |
| 15:0 | register index or physical row |

Memory writes address physical rows. Chunk c covers bits `[32c+31:32c]` of
the 1024-bit weight word, the 224-bit bias word or the 64-bit activation
word. To load a 4x4-mode network, place logical row r in chunk 0/1 (r < 512)
or chunk 2/3 (r >= 512) of physical row r mod 512. Only registers are
readable; the data comes back on MISO during the data phase.

### Registers

| index | content |
|---|---|
| 4l+0..4l+2 | `layer_cfg_t` of layer l (82 bits, word 0 = bits 31:0) |
| 128, 129 | `glob_cfg_t` (63 bits) |
| 130 | number of classes of the learned FC layer |
| 131 | status: busy flags [1:0], class count [24:16] (read only) |

`layer_cfg_t` fields (LSB last): kernel, dilation exponent, input and output
block counts minus one, residual mode (none, identity, 1x1 conv), residual
source layer or network input, residual and output shifts, ReLU, stride
exponent, final-only flag, FIFO depth, weight / residual-weight / bias /
activation base rows. `glob_cfg_t`: number of layers, embedding layer,
sequence length T, input blocks minus one, input-buffer depth, 4x4 mode,
learning mode, shots k, embedding base row, learned FC layer, and input-bus
transfers per input row minus one. The exact bit layout is in
`rtl/chameleon_pkg.sv`.

### Input and output buses

Both use a four-phase handshake (request up, acknowledge up, request down,
acknowledge down), and both synchronise the incoming signal. Each 16-bit
input transfer carries four 4-bit inputs, lowest nibble first.
`in_xfer_m1 + 1` transfers form one 16-lane row, and `in_blk` rows form one
timestep. The output bus carries an 8-bit class index per classified sequence,
and the new class index after each learned class.

## Using it

A minimal flow, as the end-to-end testbench does it:

1. Write the layer and global records, and the class count.
2. Write weights and biases over SPI.
3. Stream T timesteps per sequence on the input bus and read a class per
   sequence from the output bus.
4. To learn classes: set `learn` in the global record. Send k sequences per
   new class and read back the class index after every k-th one. Clear
   `learn` to return to inference.

Change the mode or the network only while the core is idle (status busy flags
clear, no input pending). Changing `in_depth` between sequences needs a reset,
since the input write slot and the read slot are tracked separately.

## Simulation

All code is SystemVerilog-2017 and needs no external data files. With
Verilator 5:

```
verilator --binary --timing -Irtl --top-module chameleon_tb \
    rtl/chameleon_pkg.sv tb/chameleon_tb.sv $(ls rtl/*.sv | grep -v _pkg)
./obj_dir/Vchameleon_tb
```

Each testbench ends with `TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `log2_pe_tb` | every activation x weight code x enable |
| `pe_array_tb` | random tiles in both modes against integer dot products |
| `ope_tb` | random operation sequences against an accumulator model (saturation, shifts, ReLU, clipping) |
| `argmax_tree_tb` | block-wise argmax with masks and ties, both modes |
| `proto_extractor_tb` | LOD, weights and bias for random sums and k = 1..128 |
| `learning_controller_tb` | read order, writes, and the (k+2)*ceil(V/16)+1 latency |
| `network_address_generator_tb` | greedy (layer, t) order against an independent model, reads per run, no read of a row being written, stalls happen |
| `weight_memory_tb`, `bias_memory_tb`, `activation_memory_tb` | layouts, stacking, masked writes, read-old-data |
| `input_buffer_tb`, `input_bus_tb`, `output_bus_tb`, `spi_slave_tb`, `config_regs_tb` | interfaces and flow control |
| `chameleon_tb` | whole core at its default sizes (see below) |

`chameleon_tb` drives the pins only: SPI, the input bus and the output bus.
It first runs a 4-layer TCN in 16x16 mode: dilations 1/2/4, an identity
residual, a 1x1-convolution residual from the input, and a 20-class FC head.
It classifies sequences, learns 3 classes with 3 shots each, and classifies
again with 23 classes. After a reset it repeats this with a 4x4-mode network
whose weights span both stacked banks. A reference model in the testbench
computes the same network densely, every layer at every timestep with
identical arithmetic. Every class must match. The testbench also checks the
learning latency and the FC cycle count, and it counts each mechanism: input
back-pressure, stalls, causal padding, both residual kinds, learning, 4x4
mode with the MSB memories off, and stacked bank-B reads. A mechanism that
never occurs counts as a failure.

## Departures from the published design and limits

* Clock and power gating are represented by their logical effect only. Unused
  PEs output zero, and `msb_pwr_en` is a port. The power switch and the
  separate rail are outside the RTL.
* The SPI frame, register map, configuration records, input packing (4 inputs
  per transfer), output acknowledgement of a learned class and the zero weight
  code are this design's own. The published description names these blocks
  but gives no details.
* A weight-memory figure of the published design prints 5x128b for the word
  layout. This design follows the 512 x 1024b size stated elsewhere, with two
  64-bit always-on banks.
* The scheduling rule (a stride per layer, FIFO = K newest entries) is one
  concrete way to realise greedy dilation-aware execution. It requires
  non-decreasing dilations and residual sources that run at least as often as
  their readers; a schedule that violates this is not detected.
* The bias of a learned class is divided by a right shift of 2·⌈log2 k⌉
  bits, as published. This equals the division by 2k of the exact formula
  only for k = 2. For other k the learned classifier approximates
  nearest-prototype classification less closely.
* Prototype exponents saturate at 7 (3-bit exponent field). An embedding sum
  of 0 gets weight 2^0 = 1 rather than zero. Bias saturates at -8192.
* Output classes are limited to 256 by the 8-bit output bus. The class count
  register is 9 bits.
* The read/write stall can last two cycles (three-stage pipeline) instead of
  one.
* Only configuration registers can be read back over SPI; memories are write
  only.

## Files

`rtl/chameleon_pkg.sv` holds the shared types and constants. Each block has
one file: `log2_pe`, `pe_array`, `ope`, `argmax_tree`, `proto_extractor`,
`learning_controller`, `network_address_generator`, `config_regs`,
`weight_memory`, `bias_memory`, `activation_memory`, `input_buffer`,
`input_bus`, `output_bus`, `spi_slave`, and the top `chameleon`. `tb/` holds
one testbench per block. Each file opens with a description of the block, its
timing, and which parts follow the published design.
