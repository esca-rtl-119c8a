# An input-combining systolic accelerator for codec-avatar decoders

A codec avatar sends a person's face across a network as a small latent code.
The receiving headset turns that code back into a face texture with a decoder
that is mostly a stack of transposed convolutions, layers that upsample by 2
each time. Run on a plain matrix engine, a stride-2 transposed convolution
wastes most of its multiplies. It is computed as an ordinary convolution over
an input into which zeros have been inserted, and after the usual im2col
lowering about three quarters of the activation matrix is zero by
construction.

This accelerator removes those zeros before they reach the multipliers. It uses
the fact that the zeros are not random. For stride 2 and an even kernel, every
4x4 tile of the im2col matrix is either all zero or a checkerboard. The
all-zero tiles are never generated. The two halves of each checkerboard are
merged, so each processing element receives two activations per cycle, knows
which one is the real one, and does one multiply-accumulate. A decoder layer
then takes a quarter of the array cycles it would take with plain im2col. The
rest of the chip is a conventional 16x16 weight-stationary systolic array with
its buffers, DMA, accumulator and output stage, plus a small scheduler. The
scheduler lets the same array encode the local user's face and decode the
remote user's face in an overlapped pipeline.

The design is written in synthesizable SystemVerilog (IEEE 1800-2017). Every
block has a self-checking testbench. One end-to-end testbench runs whole
layers on the full-size design and compares every output byte with a
reference model.

## 1. Where the zeros are

A transposed convolution with kernel K, stride S and padding P is the same as
a stride-1 convolution over an *expanded* input:

- S-1 zeros are inserted between neighbouring pixels;
- pad_e = K-P-1 rows and columns of zeros surround the map.

An input of width W expands to

    W' = W + 2(K-P-1) + (W-1)(S-1)

The output width is then W' - K + 1. The running example is the first decoder
layer: W=2, K=4, S=2, P=1. The 2x2 map becomes 7x7, with one zero between the
pixels and two rings of padding, and the output is 4x4.

With S = 2, a position (y, x) of the expanded map holds a real input pixel
only if y - pad_e and x - pad_e are both even. Take output pixel (oh, ow) and
kernel tap (kh, kw). The tap reads position (oh+kh, ow+kw), so:

- **Row parity.** For a given output row, only kernel rows with
  oh+kh-pad_e even can hit real data. All the other kernel rows produce
  all-zero tiles of the im2col matrix. Each output row therefore needs only
  half of the kernel rows. Which half depends only on the parity of oh.
- **Column pairs.** Group the taps in pairs (kw, kw+1) with kw even. For any
  output column exactly one tap of each pair can hit real data, namely the
  one with ow+kw-pad_e even. Which one it is alternates from one output column
  to the next.

So, for one output-row parity, the live part of the matrix has
(K/2) x (K/2) pair rows per input channel instead of K x K rows. Each pair
row carries two activations, and for every pixel exactly one of them can be
non-zero. Padding positions are treated the same way. They are zero in value,
but the select logic still visits them, which keeps the schedule regular.

## 2. The input-combining processing element

Each PE (`pe`) holds three preloaded values:

- two weights, W1 and W2, which are the two taps of a pair;
- a 16-bit select sequence.

Every cycle it receives two activations, Xi1 and Xi2, from the PE below and
passes them up unchanged (Xo1, Xo2). Two multiplexers, steered by bit 0 of the
select sequence, choose the live activation and its weight. One
multiply-accumulate adds their product to the partial sum coming from the
left (Yo = Yi + w*x). The sequence rotates by one position for every valid
activation.

The output columns of a pixel block are visited in order, and the live tap
alternates with the column. The sequence is therefore 0101... or 1010..., and
its phase is (pad_e + first column of the block) mod 2. The weight-side
engine writes it with the weights. Output rows always have an even width
here, so the alternation carries on unbroken from one row to the next.

In dense mode (any layer that cannot be combined) the sequence is all zeros,
W2 and Xi2 are zero, and the PE is an ordinary MAC.

INT4 mode multiplies the sign-extended low four bits of each operand. The
datapath is the same as for INT8, so INT4 changes the number format but not
the speed.

## 3. The array

`systolic_array` is a grid of ROWS x COLS = 16 x 16 PEs.

- **Columns are im2col matrix rows.** Each column holds one matrix row: one
  (input channel, kh, kw-pair).
- **Rows are output channels.** Each PE row holds the weights of one output
  channel.
- **Activations move up, partial sums move right.** One output pixel's 16
  activation pairs enter at the bottom edge. Column c is delayed by c cycles,
  which gives the staggered wavefront. Partial sums travel from left to right,
  and the 16 dot products leave the right edge.
- **Output de-skew.** Row r leaves the right edge r cycles after row 0. It is
  delayed by another 15-r cycles so that all 16 results appear together as
  one vector.

The array accepts one pixel per cycle. The first result vector appears 31
cycles (ROWS+COLS-1) after its pixel entered.

Weights are loaded one PE row per cycle, over 16 cycles, through a row-select
port. An assertion forbids loading weights while activations are still in
flight.

## 4. Lowering a layer onto the array

Two engines generate the im2col matrix on the fly. The zero-inserted map is
never stored.

**Activation side (`im2col_engine`).** The engine first assigns the next 16
matrix rows of the current phase to the 16 columns. This takes 16 cycles and
produces a `col_map` of (cin, kh, kw) per column. Rows are ordered with the
input channel outermost and kw innermost.

- Combined mode: kh runs over the kernel rows of the current row parity,
  (2a + (pad_e + phase) mod 2), and kw over the even taps.
- Dense mode: all K x K taps are used.

After that, the engine takes one output pixel (oh, ow) per cycle and computes
for every column the two expanded-map positions, (oh+kh, ow+kw) and
(oh+kh, ow+kw+1). For each position it subtracts the padding and checks the
stride bit and the bounds. It then reads the matching input-buffer byte, or
forces zero. Results come one cycle later, which is the buffer's read latency.

For the encoder's ordinary convolutions the same engine runs in dense mode
with S = 1 and an optional output stride of 2.

**Weight side (`weight_im2col`).** For output-channel group g and a given
column map, this engine reads, for every array row r and column c:

- W1 = W[16g+r][cin][kh][kw], and
- W2 = the next tap, kw+1 (combined mode only).

It loads one row per cycle and forces zero for unmapped columns and for
channels beyond cout. It also builds the select sequence.

**Controller (`esca_ctrl`).** A layer job runs as follows:

1. DMA the input map, the weights and the biases on chip.
2. For each group of 16 output channels, for each phase (even and odd output
   rows when combined, a single phase otherwise), and for each block of up to
   1024 output pixels of that phase:
   1. For each K-chunk of 16 matrix rows: map the columns, preload the
      weights, and stream the block's pixels through the array at one per
      cycle. The accumulator stores the first chunk and adds the later ones.
   2. Drain the block. The special function unit post-processes each vector,
      and the DMA writes each byte to DRAM.

A combined transposed-convolution layer with cin input channels therefore
streams each output pixel through cin x (K/2)^2 / 16 K-chunks (rounded up).
In dense mode it needs cin x K^2 / 16 K-chunks. For K = 4 the stream-cycle
ratio is exactly 1 : 4.

## 5. Output stage

`accumulator` keeps one 16-lane vector of 32-bit sums per pixel of the
current block. It is a two-stage read-modify-write pipeline. The first K-chunk
overwrites and later chunks add.

`sfu` processes each drained vector:

1. Add the 32-bit bias of the lane's output channel.
2. Apply LeakyReLU, max(a*x, x), with a = 2^-alpha_shift.
3. Round half up and shift right by out_shift.
4. Saturate to signed 8 or 4 bits.

Channel-wise smoothing scales and their inverses are folded into the weights
and biases offline, so no scaling hardware is needed at run time.

## 6. Programming model

The host port is 32 bits wide with word addresses. Two layer descriptors sit
at words 0..6 and 8..14. Slot 0 is used by encode jobs and slot 1 by decode
jobs.

| word | bits |
|---|---|
| +0 | cin [11:0], cout [27:16] |
| +1 | hin [7:0], win [15:8] (input size) |
| +2 | k [3:0], s_log2 [5:4], os_log2 [7:6], pad_e [11:8], combine [12], int4 [13], alpha_shift [19:16], out_shift [28:24] |
| +3..+6 | DRAM byte addresses: activations, weights, biases, outputs |

The fields of word +2 are:

- s_log2: log2 of the input zero-insertion stride, 1 for a stride-2
  transposed convolution;
- os_log2: log2 of the output stride, used by strided ordinary convolutions;
- pad_e: the expanded-map padding, K-P-1 for a transposed convolution and P
  for an ordinary one;
- combine: allow input combining. It takes effect only when S = 2, K is even
  and the output stride is 1.

The status words are read-only:

| word | contents |
|---|---|
| 16 | busy, pending decode and encode jobs, dropped requests, decode wait cycles |
| 17 | cycles in which a pixel entered the array during the last job |
| 18 | busy cycles of the last job |
| 19 | decode and encode job counts |

DRAM layouts, all bytes:

| data | layout |
|---|---|
| activations | [cin][h][w] |
| weights | [cout][cin][kh][kw], in the equivalent-convolution orientation (a transposed-convolution kernel is flipped in both axes) |
| biases | 4 little-endian bytes per output channel |
| outputs | [cout][oh][ow] |

**Jobs and scheduling.** A pulse on `frame_sensed` asks for an encode, and a
pulse on `latent_received` asks for a decode. The frame scheduler counts
pending requests and applies two rules:

- only one job runs at a time, because encode and decode share the array;
- a decode starts only after its latent code has arrived.

When both kinds are waiting, the encode goes first. `enc_done` and `dec_done`
pulse at the end of each job. A multi-layer network is a sequence of such
jobs, programmed by the host between them.

With the published stage times (about 1 ms sensing, 3 ms encode, 5 ms
transmission, 3 ms decode), transmission of one frame overlaps decoding of
the previous one. Frames then leave every 10 ms, which is 100 frames/s. The
scheduler testbench replays this schedule at 100 cycles per millisecond and
checks the 1000-cycle interval between decoded frames.

## 7. How far this follows the published design

**Taken from the published description:**

- the 16x16 weight-stationary array, with activations moving upward and
  partial sums moving right;
- the PE with two weights, two activations, two multiplexers, a select-bit
  sequence and one MAC;
- the 4x4 tile argument and the zero-insertion formula;
- the block list: register file, DMA, input and weight buffers with im2col
  engines, accumulator, special function unit and DRAM;
- INT8 and INT4 operation;
- LeakyReLU;
- the two scheduling rules.

**Choices made in this design.** The description is silent on these points:

- all widths and depths: 64 KiB per buffer, 1024-pixel accumulator blocks,
  32-bit sums, and up to 256 output channels;
- the register map and the DRAM protocol;
- the row order and the phase split of the lowering;
- how the select sequence is derived;
- the weight-side im2col engine's exact role;
- the whole controller;
- the requantisation arithmetic;
- INT4 as low-nibble arithmetic.

**Known limits:**

- A layer must fit on chip in one piece: cin x hin x win bytes of input and
  cout x cin x K^2 bytes of weights, at most 65536 each, and cout <= 256.
  There is no spatial or channel tiling. The largest decoder layers of a
  full-resolution texture model therefore do not fit.
- INT4 does not run faster than INT8, because the description does not say
  how its INT4 speed-up is obtained. The published millisecond latencies
  cannot be compared either, since no clock frequency is given.
- Combining is implemented for stride 2 with even kernels, the case the tile
  argument covers. Other layers run dense.
- Each buffer is one array with 32 read ports. A physical implementation
  would bank it.

## 8. Simulating

Each testbench in `tb/` is self-checking. It prints
`TB_RESULT checks=N failures=M` and stops, and each has a watchdog. With
Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/esca_pkg.sv \
        tb/tb_esca_top.sv --top-module tb_esca_top -Mdir obj_top
    obj_top/Vtb_esca_top

Replace `tb_esca_top` with any other testbench name.

| testbench | what it checks |
|---|---|
| tb_pe | MAC, mux selection, sequence rotation, INT4 |
| tb_systolic_array | random matrix products, 31-cycle latency, one vector per cycle, both select phases |
| tb_im2col_engine | column mapping and every activation, against an explicitly built zero-inserted map; only one live position per pair; 1/4 of the rows |
| tb_weight_im2col | every weight pair, zeroing, select sequence, load timing |
| tb_sram_buffer, tb_accumulator, tb_sfu, tb_dma, tb_reg_file | each against a simple model |
| tb_frame_scheduler | both rules under random traffic, and the 100 frames/s schedule |
| tb_esca_top | the full-size design |
| tb_decoder_chain | a six-layer decoder-shaped stack, run layer after layer |

`tb_esca_top` runs four layer jobs with default parameters through a
behavioural DRAM (`tb/dram_model.sv`) that has random stalls:

- a combined INT8 transposed convolution, 8x24x24 to 20x48x48;
- a strided dense convolution issued as an encode job;
- the first layer again without combining;
- a 2x2 to 4x4 INT4 layer shaped like the decoder's first layer.

It checks every output byte against a direct (scatter-form) reference. It
also checks that the combined layer takes exactly a quarter of the dense
stream cycles (9216 against 36864), and it counts every mechanism it expects
to see.

`tb_decoder_chain` runs six chained stride-2 transposed convolutions on the
default-size design:

    32x2x2 -> 32x4x4 -> 32x8x8 -> 32x16x16 -> 16x32x32 -> 16x64x64 -> 3x128x128

Each layer reads the previous layer's output from DRAM. The first layer has
the decoder's 2x2 -> 4x4 geometry, and the last layer's input fills the input
buffer exactly. The testbench checks:

- every byte of every layer;
- each layer's pixel-cycle count, ceil(cout/16) x Ho x Wo x ceil(cin x 4 / 16);
- that the last layer re-run without combining gives the same bytes in four
  times the pixel-cycles.

In that run about 18% of the busy cycles stream pixels. The rest is mostly
byte-wide DMA traffic: loading inputs and weights, and writing results. For
throughput, the DRAM port width is the first thing to widen. The published
description does not give it.

## 9. Files

| file | contents |
|---|---|
| `rtl/esca_pkg.sv` | constants, the layer descriptor, and the shape functions |
| `rtl/pe.sv`, `rtl/systolic_array.sv` | PE and array |
| `rtl/im2col_engine.sv`, `rtl/weight_im2col.sv` | the two lowering engines |
| `rtl/sram_buffer.sv` | input and weight buffers |
| `rtl/accumulator.sv` | accumulator |
| `rtl/sfu.sv` | special function unit |
| `rtl/dma.sv` | DMA |
| `rtl/reg_file.sv` | register file |
| `rtl/frame_scheduler.sv` | frame scheduler |
| `rtl/esca_ctrl.sv` | controller |
| `rtl/esca_top.sv` | top level |
| `tb/` | one testbench per block, plus the DRAM model |
