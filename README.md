# A tiled deconvolution accelerator with reverse looping and stride-hole skipping

Generative networks (DCGAN-style generators, super-resolution and segmentation
decoders) grow small feature maps into large ones with *deconvolution*
(transposed convolution) layers. The textbook way to compute such a layer
scatters each input pixel, multiplied by a K x K kernel, into an output
window that starts at `(S*i_h - P, S*i_w - P)`. On an FPGA that scatter form is
awkward: if the input is cut into tiles, the output tiles overlap and the
overlaps must be summed afterwards, by extra hardware or by the host.

This RTL implements an accelerator that avoids the overlap altogether. It
loops over the **output** instead of the input (*reverse looping*): an output
tile is fixed, the accelerator fetches exactly the input window that tile
depends on, and every output word is finished inside one tile. It also never
visits the "holes" that a stride S > 1 leaves: for a given kernel row k_h
only every S-th output row receives a contribution, and the accelerator
computes which ones directly (*stride-hole skipping*), so no cycle is spent
testing for a fractional input index.

The arithmetic is 12-bit fixed point, with a T_OC x T_IC array of
multipliers (13 x 16 = 208 by default, sized for the 220 DSP slices of a
Zynq-7020) feeding one adder tree per output channel.

## The loop nest

For one output tile of T_OH x T_OW pixels and T_OC channels, fed from T_IC
input channels, the accelerator executes

```
for k_h in 0..K-1
  for k_w in 0..K-1
    for o_h' in 0..rows-1          # rows <= T_OH/S
      for o_w' in 0..cols-1        # cols <= T_OW/S, pipelined, one per II clocks
        for o_c, i_c  (all at once in the processing engine)
          f_h = (S - ((P - k_h) mod S)) mod S      # output phase of this kernel row
          d_h = (f_h + P - k_h) / S                # exact: numerator is a multiple of S
          o_h = S*o_h' + f_h                       # tile-local output row
          i_h = o_h' + d_h                         # tile-relative input row
          (same for w)
          out[o_c][o_h][o_w] += in[i_c][i_h][i_w] * kernel[o_c][i_c][k_h][k_w]
```

`mod` is the mathematical (non-negative) remainder. The identity behind it:
output row `o` receives kernel row `k` from input row `(o + P - k)/S` only when
`(o + P - k)` is a multiple of S. Writing `o = S*o' + f` this becomes
`(f + P - k) mod S = 0`, which has exactly one solution `f` in `0..S-1` for
each `k`. So for each kernel row the accelerator walks exactly the output rows
of phase `f_h`, and the input row is an integer by construction.

A worked case, K = 5, S = 2, P = 2:

| k   | 0 | 1 | 2 | 3 | 4  |
|-----|---|---|---|---|----|
| f   | 0 | 1 | 0 | 1 | 0  |
| d   | 1 | 1 | 0 | 0 | -1 |

Kernel rows 0, 2, 4 write the even output rows, 1 and 3 the odd ones.

### The input window

`d` is largest for `k = 0` and smallest for `k = K-1`. The input window of a
tile whose first output row is `o_h0` (a multiple of S) therefore starts at
input row `o_h0/S + d(K-1)` and is `rows + d(0) - d(K-1)` rows tall (same for
columns). The address generator subtracts `d(K-1)` so that window addresses
start at zero. Window rows and columns that fall outside the input feature
map are sent as zeros by the host; this replaces the padding logic.

The input banks are 11 x 11 words by default, `ceil((T_OH + K)/S)` for
T_OH = 16, K = 5, S = 2. With S = 2 a full 8 x 8 `o'` tile (16 x 16 output
pixels) needs a 10 x 10 window. With S = 1 the window is `rows + K - 1` tall,
so the host must use at most `11 - (K - 1)` rows and columns per tile.

## Block structure

```
             AXI4-Lite                     irq
                |                           ^
         +--------------+  cfg, start  +-----------+
         |axil_ctrl_regs|------------->| sequencer |  (in deconv_accel)
         +--------------+              +-----------+
                                         |  LOAD_W / LOAD_IN / COMPUTE / STORE
 s_axis --> loader --+--> weight_buffer (T_OC x T_IC banks of K_MAX^2)
                     +--> input_buffer  (T_IC banks of IN_H x IN_W)
                               |  shared read addresses
                     deconv_addr_gen (loop nest above)
                               |
                     processing_engine (T_OC x T_IC multipliers,
                               |        T_OC adder_tree instances)
                     output_buffer (T_OC banks of T_OH x T_OW accumulators)
                               |
 m_axis <-- requantise (12 bit, saturating) <--+
```

| File | Role |
|------|------|
| `rtl/dcnn_pkg.sv` | word widths, the `layer_cfg_t` struct, phase/offset functions, rounding |
| `rtl/input_buffer.sv` | input window, one bank per input channel |
| `rtl/weight_buffer.sv` | kernels, one bank per multiplier |
| `rtl/deconv_addr_gen.sv` | the loop nest and the stride-hole-skipping address arithmetic |
| `rtl/processing_engine.sv`, `rtl/adder_tree.sv` | multiplier array and pipelined adder trees |
| `rtl/output_buffer.sv` | accumulators with registered read-modify-write |
| `rtl/axil_ctrl_regs.sv` | host registers and interrupt |
| `rtl/deconv_accel.sv` | top: job sequencer, stream loaders, wiring |

## Pipeline and timing

One loop iteration flows through:

| clock | stage |
|-------|-------|
| t | address generator issues (input, weight, output addresses) |
| t+1 | input and weight banks deliver their words |
| t+2 | T_OC x T_IC products registered |
| t+2 .. t+1+LAT | adder-tree levels, LAT = 1 + ceil(log2 T_IC) = 5 |
| t+1+LAT | output word read into the read register |
| t+2+LAT | old value + partial sum written back |

The innermost `o_w'` loop issues one iteration every `II` clocks (II is a
register, 2 in the paper's configuration and in the tests of the main layer).
At the end of every row the address generator waits until the datapath is
empty before it starts the next row. A row therefore costs
`PD + II*(cols - 1)` clocks with `PD = LAT + 4 = 9` for T_IC = 16, and the
compute phase of a job takes

```
K^2 * rows * (PD + II*(cols - 1)) + 2   clocks
```

(from the start pulse of the address generator to its done pulse). The test
bench checks this number for every job. The per-row drain is also what
makes the read-modify-write safe without forwarding: within a row all output
addresses differ, and no row starts before the previous one has been written
back.

With II = 2 and 208 multipliers the peak is 104 multiply-accumulates per
clock during a row. Loading and storing are not overlapped with computing:
there is a single set of buffers, no ping-pong.

### Register insertion in the output buffer

The T_IC products that belong to one output word are summed in the adder
tree, in registers, and the accumulator word is then read once (into a read
register) and written once (from a write register). Without that, an
accumulation per input channel would cost T_IC reads and writes of the same
memory word. Rather than clearing 13 x 256 words at the start of a tile, the
buffer keeps one "written" flag per address; a word whose flag is clear reads
as zero. Clearing is one clock.

## Using it: the job protocol

The host runs a layer as a series of *jobs*, one per (output tile, group of
up to T_IC input channels):

1. Write GEOM (K, S, P, II) and TILE (rows, cols, active input channels,
   active output channels).
2. Write CTRL with START, plus FIRST for the first input-channel group of an
   output tile (discards the old partial sums) and LAST for the final group
   (sends the finished tile out).
3. Stream, on `s_axis`, the kernels of the active output and input channels
   (order: o_c, i_c, k_h, k_w) and then the input window (order: i_c, row,
   column). Each word is a 12-bit sample sign-extended to 16 bits.
4. If LAST was set, receive `oc_active * rows*S * cols*S` words on `m_axis`
   (order: o_c, row, column; TLAST on the final word). Each is the
   accumulator divided by 2^8 (floor) and saturated to 12 bits.
5. Wait for `irq` (if enabled) or poll STATUS.DONE; write 1 to STATUS bit 1
   to clear it.

Output rows past the true layer size in an edge tile are computed from the
zero-filled window and should be discarded by the host.

Register map (32-bit registers, byte addresses):

| addr | name | fields |
|------|------|--------|
| 0x00 | CTRL | W: bit0 START (pulse), bit1 FIRST, bit2 LAST. R: FIRST, LAST |
| 0x04 | STATUS | bit0 BUSY, bit1 DONE (sticky, write 1 to clear) |
| 0x08 | IER | bit0 interrupt enable |
| 0x0C | GEOM | [3:0] K, [7:4] S, [11:8] P, [15:12] II, [16] CONV |
| 0x10 | TILE | [7:0] rows, [15:8] cols, [23:16] input channels, [31:24] output channels |

Inactive input channels (beyond the TILE count) get zero weights, so a layer
with fewer than T_IC input channels, or a last group that is not full, needs
no padding in the stream.

### Convolution mode

The same datapath runs ordinary (strided) convolution layers when GEOM.CONV
is set. The loop nest is unchanged; only the address arithmetic differs:
`o_h'` is the output row itself, there are no phases, and the input row is
`S*o_h' + k_h`, counted from a window that starts at input row `S*o_h0 - P`
and is `S*(rows-1) + K` rows tall. A convolution tile is `rows x cols` output
words per channel. With the 11-row input banks, a tile may have at most
`(11 - K)/S + 1` rows and columns.

### Running whole networks

Any layer with K <= 5 can be run this way. For the DCGAN-style 64 x 64
generator (1024x4x4 -> 512x8x8 -> 256x16x16 -> 128x32x32 -> 3x64x64, K = 5,
S = 2), a 1024-channel input is 64 jobs per output tile, accumulated on chip
in 32-bit words. The fully connected projection from the latent vector
(100 -> 1024x4x4) is a deconvolution of a 1x1 input with K = 4, S = 1,
P = 0. Batch normalisation and the activation functions are not in the
hardware; the host applies them between layers.

## Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `T_OC` | 13 | output channels per tile (multiplier rows) |
| `T_IC` | 16 | input channels per tile (multiplier columns, adder-tree width) |
| `T_OH`, `T_OW` | 16 | output tile size in pixels |
| `K_MAX` | 5 | largest kernel |
| `IN_H`, `IN_W` | 11 | input window banks, `(T_OH + K_MAX + 1)/2` |
| `DATA_W` / `FRAC_W` / `ACC_W` (package) | 12 / 8 / 32 | word, fraction bits, accumulator |

`T_OC * T_IC` should not exceed the DSP slices of the target. The 12-bit
word fits the 18-bit DSP multiplier, which is why one DSP per multiplier is
enough.

## Where this departs from, or adds to, the published design

The published accelerator was written in high-level synthesis; this is a
hand-written RTL version of its architecture. What follows the publication:
the 12-bit fixed-point word, the loop order and the stride-hole-skipping
formula, the unrolled T_OC x T_IC multiplier array with adder trees, input,
weight and output buffers with the published buffer sizes, the II = 2
pipelining of the o_w' loop, registers in front of the output memory, AXI-Lite
control with an interrupt and streamed data from a DMA.

This design's own choices, because the publication does not give them:

* Tile sizes T_OC = 13, T_IC = 16, T_OH = T_OW = 16 (only the bound
  `T_OC * T_IC <= #DSP` and a 95 % DSP utilisation are published).
* Q4.8 number format, 32-bit accumulators, floor rounding with saturation.
* The register map, the FIRST/LAST job protocol, the stream orders and the
  host-supplied zeros for out-of-map window positions.
* Each row waits for the datapath to drain. The published cycle model has
  the same `PD + II*(T_OW - 1)` cost per row but counts `T_OH` rows where its
  loop nest has `T_OH/S`; the loop nest is followed here.
* The one-clock clear of the output buffer by written flags.

The convolution mode is described in the publication only as something
the accelerator also supports; its addressing here is this design's own.

Not built: ping-pong
buffering (mentioned as a future improvement), activation and normalisation.
The host processor, DMA engine, buses, memory controller and DDR are outside
this RTL; the top exposes the stream and AXI-Lite ports they would connect
to.

## Verification

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|-----------|----------------|
| `tb_input_buffer`, `tb_weight_buffer` | per-bank write/read, read latency |
| `tb_processing_engine` | sums of products including extreme values, latency 4 for T_IC = 5 |
| `tb_output_buffer` | accumulation against a model, one-clock clear, write-back timing |
| `tb_deconv_addr_gen` | every address triple against a brute-force phase search, II spacing, drain before each row |
| `tb_axil_ctrl_regs` | registers, START pulse and its suppression while busy, sticky DONE, IER |
| `tb_deconv_accel` | whole accelerator at default parameters, see below |
| `tb_workloads` | layers shaped like the evaluated networks, see below |

`tb_deconv_accel` acts as host and runs two layers at the default sizes:
20 -> 13 channels, 10x10 -> 19x19 with K = 5, S = 2, P = 2, II = 2 (four
output tiles including edge tiles, two input-channel groups accumulated on
chip), 5 -> 4 channels with K = 3, S = 1, P = 1 on full-range data so
that the output saturates, and two convolution layers (K = 3, S = 2 and
K = 5, S = 1). It compares every output word with a scatter-form
reference, times every compute phase against the formula above, and counts
that input stalls, output back-pressure, partial channel groups, edge tiles,
zero-filled windows, saturation, the interrupt, both strides and the
convolution mode all occur.

`tb_workloads` uses the same host procedure, also at default parameters, on
layers shaped like those of the evaluated generators: the 10x2x2 -> 64x4x4
layer used for design-space exploration (kernel 4, stride 2 and padding 1
are assumed, since only the sizes are published), the last layer of a 28x28
MNIST generator (64x14x14 -> 1x27x27), the last layer of a 64x64 CelebA
generator (128x32x32 -> 3x63x63: 8 input-channel groups by 16 output tiles),
and the full latent projection 100 -> 1024x4x4 as a 1x1-input
deconvolution (553 jobs). Output sizes follow `O = S*(I-1) + K - 2P`. Every
output word is compared against the reference.

How far to trust it: each testbench has been run against a deliberately
broken copy of its block and fails there. The cycle counts are those of
this RTL, not measurements of the published FPGA build. The published
result of 2.6 GOPS at 100 MHz includes data transfer over the DMA and is not
reproduced here.

Running a testbench with Verilator (from the directory that holds `rtl/` and
`tb/`):

```
verilator --binary --timing --assert -Wno-fatal rtl/dcnn_pkg.sv rtl/*.sv \
    tb/tb_deconv_accel.sv --top-module tb_deconv_accel -o sim
./obj_dir/sim
```

The simulator is two-state; every register that is read is reset or written
first.
