# A 4/8-bit mixed-precision NPU with run-time adjustable 4-bit ratio

A network is quantised once to 8 bits. For each layer, the input (feature)
channels whose activations and weights have small value ranges are moved to
the front of the channel order, and at run time the first `n_ch4` of them are
computed with 4-bit operands while the rest stay 8-bit. The 4-bit operands are
never stored: they are cut out of the 8-bit values on their way into the
chip, at a per-group *bit index* that skips high bits that only repeat the
sign. Because a 4-bit value is a window of its 8-bit value, the share of 4-bit
work can be changed between two inferences by rewriting one field of each
layer instruction; no second copy of the model and no re-quantisation are
needed.

The hardware is a 32 x 32 weight-stationary systolic array whose processing
elements (PEs) each hold four 4-bit multipliers. In 8-bit mode the four
multipliers form one 8 x 8 product; in 4-bit mode two of them multiply two
different input channels, so a PE row covers two input channels and one pass
through the array reduces 64 channels instead of 32. Both modes take one
activation byte per row per cycle, so the precision can change from one
channel group to the next without a pipeline bubble.

This RTL builds the NPU: bit-index muxes in front of the weight and input
buffers, the dual-mode PE array, the accumulator that aligns 4-bit sums to the
8-bit scale, a requantising SIMD stage, output buffer, instruction memory, a
run-time range detector for activations, a channel permutation for residual
connections, and a controller that sequences whole layers.

## 1. Cutting a 4-bit value out of an 8-bit value

An 8-bit signed value `x` with a small magnitude has several high bits equal
to its sign. Let the bit index `u` (0..4) be the number of such high bits that
are skipped. The 4-bit value is

    q = clip( floor( x / 2^(4-u) + 1/2 ), -8, 7 )

i.e. an arithmetic right shift by `4-u`, plus the highest bit shifted out
(round half up), then saturation. `q` stands for `x / 2^(4-u)`; the scale is
put back in the accumulator (section 4). Examples:

| x   | u | q  | meaning              |
|-----|---|----|----------------------|
| 29  | 2 | 7  | 29 ~ 7 * 4           |
| -9  | 3 | -4 | -9 ~ -4 * 2          |
| 29  | 0 | 2  | naive "top nibble"   |
| 5   | 4 | 5  | low nibble unchanged |

When the index claims more unused bits than the value has, `q` saturates to
-8 or 7. The function is `flexiq_pkg::extract4`; it is instantiated once per
byte lane in `bit_index_mux`.

Bit indices are held per 32-channel half of a 4-bit group: one index for
the activations of the half and one per output column for its weights.
They are either static (computed offline, read from memory with the group)
or, for activations, measured at run time (section 5).

## 2. The processing element

`pe` holds one stationary weight byte `w` and receives one activation byte
`x` from the left together with a one-bit precision tag. The nibbles are
`X1 = x[3:0]`, `X3 = x[7:4]`, `X2 = w[3:0]`, `X4 = w[7:4]`.

* 8-bit mode: `x*w = X1*X2 + (X3*X2 + X1*X4) << 4 + (X3*X4) << 8`, where the
  high nibbles are signed and the low nibbles unsigned. Each multiplier takes
  5-bit signed operands so that one multiplier serves both cases.
* 4-bit mode: the byte carries two independent signed 4-bit channels. The
  two off-diagonal multipliers are forced to zero. The 32-bit partial sum is
  used as two 16-bit lanes: `X1*X2` is added to the low lane and `X3*X4` to
  the high lane. The two channels of a PE may have been extracted at
  different bit positions, so their products must not be added before they
  are aligned; each column therefore delivers two sums, 64 for the array.
  A lane sums 32 products of at most 64 in magnitude, so 16 bits never
  overflow.

The PE adds to the partial sum from above and passes the sum down and the
activation (with its tag) right, both registered. Latency is one cycle in
either mode.

Packing in 4-bit mode: row `r` of the array gets input channels `r` (low
nibble) and `r+32` (high nibble) of the 64-channel group, both for the
activation byte and for the weight byte. The bit-index muxes do this packing
when they fill the buffers, so the array always moves bytes.

## 3. The array and its timing

`systolic_array` is ROWS x COLS PEs (32 x 32). Rows are input channels,
columns output channels. Weights are written one row per cycle (`w_load`,
`w_row`) and then stay. An input vector (one byte per row) enters every cycle;
the array skews it internally so that row `r` sees it `r` cycles later, and
deskews the column sums, so a vector presented in cycle `t` gives its COLS
column sums together in cycle `t + ROWS + COLS - 1`, with a precision tag and
a valid bit that travel with the data. Vectors of different precision may
follow each other back to back; the tag keeps each PE in the mode of the
vector it is currently multiplying.

## 4. Bringing 4-bit sums back to the 8-bit scale

The accumulator (`accumulator`) holds one 32-bit sum per output column for
each input vector of the current tile (BUF_DEPTH = 256 vectors). For each
column sum it does

    8-bit group:  acc[v][c] = (first ? 0 : acc[v][c]) + psum[c]
    4-bit group:  acc[v][c] = (first ? 0 : acc[v][c]) + (lo[c] <<< shift[c][0])
                                                     + (hi[c] <<< shift[c][1])

where `lo` and `hi` are the sign-extended 16-bit lanes and
`shift[c][h] = (4 - u_act[h]) + (4 - u_w[h][c])` for half `h` of the group.
Every product in one lane has the same two bit indices, so one shift per
lane is exact: the 4-bit groups and the 8-bit groups add up on one scale.
The precision tag that travelled through the array with the vector selects
the case. The read of `acc[v]` is combinational and the
write registered, so one vector per cycle can be accumulated without stalls.

## 5. Finding the activation bit index at run time

With `dyn_ext` set in the instruction, the controller streams a 4-bit group's
activations through `bit_range_detect` before loading them, first the 32
channels of the low half, then those of the high half. For each byte the
detector takes `x ^ sign(x)` (the magnitude bits, with negative numbers
complemented) and ORs these over all bytes of the half and all vectors of
the pixel tile; `u` is the number of leading zeros of the 7-bit result,
limited to 4. This is the largest index at which no activation of that half
saturates. The detector is cleared between the halves, so each half gets its
own activation index. The same activations are then read a second time
through the input bit-index mux with these indices. The cost is one extra
read of the group's activations, plus two memory latencies.

## 6. Layer instructions, tiling and memory layout

The host writes a program of `flexiq_pkg::instr_t` words into the
instruction memory (`instr_mem`, 64 entries) and pulses `start` with a start
address; `done` pulses after the instruction with `last` set. One
instruction is one convolution or linear layer, given as a matrix product
(convolutions are expected in im2col form):

| field                  | meaning                                                     |
|------------------------|-------------------------------------------------------------|
| `n_ch4`                | input channels computed in 4-bit; multiple of 64            |
| `n_ch8`                | input channels computed in 8-bit; multiple of 32            |
| `n_pix`                | input vectors (pixels, tokens) of the layer                 |
| `n_otile`              | output tiles of 32 output channels                          |
| `in_addr`, `w_addr`    | activations, weights                                        |
| `idx_addr`             | static bit-index words                                      |
| `out_addr`             | outputs                                                     |
| `dyn_ext`              | measure the activation bit index at run time               |
| `relu`, `rq_mult`, `rq_shift` | requantisation                                       |
| `res_en`, `res_addr`, `perm_addr` | also store a channel-permuted copy of the output |
| `last`                 | end of program                                              |

Off-chip memory words are 32 bytes (one byte per array row or column). With
`C = n_ch4 + n_ch8` and `G = n_ch4/64 + n_ch8/32` channel groups:

| data                                     | word address                  |
|------------------------------------------|-------------------------------|
| activations of channels 32b .. 32b+31    | `in_addr + b*n_pix + p`       |
| weights of input channel ch, out tile t  | `w_addr + t*C + ch` (byte = output column) |
| bit indices of group g, out tile t       | `idx_addr + t*G + g`          |
| outputs                                  | `out_addr + t*n_pix + p`      |
| permuted copy                            | `res_addr + t*n_pix + p`      |
| permutation of out tile t                | `perm_addr + t`               |

A bit-index word holds, for half `h` (0: channels 0..31 of the group, 1:
channels 32..63), the activation index in bits `[3h+2:3h]` and the weight
index of column `c` in bits `[6+3(32h+c) +: 3]`; 8-bit groups ignore it.
The permutation word holds in byte `c` the source column of output column
`c`.

The controller walks output tiles (outer loop) and pixel tiles of at most
256 vectors (inner loop). For each tile it runs all channel groups, 4-bit
groups first (channels `0 .. n_ch4-1`, 64 at a time), then 8-bit groups
(channels `n_ch4 .. C-1`, 32 at a time), and then writes the tile back.

## 7. Sequence of one group, and cycle counts

`npu_controller` runs these phases one after another (no overlap):

1. read the group's bit-index word;
2. load the weights through the weight bit-index mux into the weight buffer
   (64 words in 4-bit mode, two channels packed per byte; 32 in 8-bit mode);
3. 4-bit with `dyn_ext`: stream the activations through the range detector,
   one 32-channel half after the other (section 5);
4. load the activations through the input bit-index mux into the input buffer
   (2P words read, P written, in 4-bit mode; P in 8-bit mode, P = tile vectors);
5. copy the weight buffer into the array, one row per cycle (ROWS + 1 cycles);
6. stream P vectors into the array, one per cycle;
7. drain: wait until the last column sums reach the accumulator
   (ROWS + COLS - 1 cycles after the last vector).

After the last group of a tile:

8. the SIMD unit requantises the P accumulator rows into the output buffer
   (one row per cycle);
9. with `res_en`, the permutation word is read;
10. each output row is written to memory, and with `res_en` written again
    with its columns permuted.

With a memory that accepts one request per cycle and answers after L cycles,
one group costs about `1 + W + A + 3L + (ROWS+1) + P + (ROWS+COLS)`
cycles (W = 32 or 64 weight words, A = P or 2P activation words; with
`dyn_ext` another `A + 2L`), and the
write-back about `P + 2` plus `2P` (or `3P`) cycles. The array is busy for P
of these cycles per group; a 4-bit group covers 64 input channels in those P
cycles where an 8-bit group covers 32, which is where the speed-up of a higher
4-bit ratio comes from. Overlapping the loads of the next group with the
stream of the current one is not done here.

The memory port is a request channel (`mem_req_valid/ready/we/addr/wdata`)
and an in-order response channel (`mem_rsp_valid/rdata`) with any latency.
`ready` may be low at any time.

## 8. Requantisation and the residual reorder store

`simd_unit` maps each 32-bit accumulator value to 8 bits:
`y = clip(floor(acc * rq_mult / 2^rq_shift + 1/2), -128, 127)`, then
`max(y, 0)` if `relu` is set. It is one pipeline stage for a row of 32 values.
`output_buffer` holds the rows of a tile.

Reordering channels so that the 4-bit channels are contiguous works by
permuting the output columns of the producing layer (its weights are
reordered offline). Where a tensor feeds two consumers with different channel
orders, as on a residual connection, a second copy is needed in the other
order. With `res_en`, each output row is written a second time through
`channel_permute` (`dout[c] = din[perm[c]]`) to `res_addr`. Permutations act
within a 32-channel output tile.

## 9. Changing the 4-bit ratio at run time

The model in memory is the 8-bit model. To change a layer's share of 4-bit
work, the host rewrites `n_ch4` and `n_ch8` of its instruction (one
instruction-memory write per layer) and, for static indices, points
`idx_addr` at the index words for the new grouping. Nothing else changes: the
weight layout depends only on the channel order, which is the same for every
ratio.

## 10. Modules

| module               | role                                                                 |
|----------------------|----------------------------------------------------------------------|
| `flexiq_pkg`         | widths, `prec_t`, `instr_t`, `extract4`, `unused_bits`               |
| `flexiq_npu`         | top: wires all blocks; ports: instruction write, start/busy/done, memory port |
| `npu_controller`     | layer / tile / group sequencer, load engine, memory requests        |
| `instr_mem`          | 64 x `instr_t`, written by the host, read by the controller         |
| `bit_index_mux`      | per-byte 8 -> 4-bit extraction and nibble packing, or 8-bit pass-through |
| `bit_range_detect`   | run-time activation bit index                                        |
| `operand_buffer`     | input buffer (256 words) and weight buffer (32 words), nibble write enables |
| `systolic_array`, `pe` | 32 x 32 dual-mode PE array with skew / deskew                      |
| `accumulator`        | 256 x 32 sums; aligns the two 4-bit lanes of each column separately  |
| `simd_unit`          | requantisation and ReLU                                              |
| `output_buffer`      | 256 rows of 32 bytes                                                 |
| `channel_permute`    | column permutation for the reordered copy                            |

Top-level parameters: `ROWS = COLS = 32`, `PSUM_W = ACC_W = 32`,
`BUF_DEPTH = 256`, `IMEM_DEPTH = 64`.

## 11. Departures and what is not here

* The 32 x 32 array, four 4-bit multipliers per PE, the two PE modes, rows as
  input channels and columns as output channels, weight-stationary flow, 64
  channels per 4-bit group, the 4-bit/8-bit channel counts per layer, bit
  extraction with rounding, alignment in the accumulator and the reorder
  store follow the published design. Everything below is this design's own.
* Buffer sizes, accumulator width (32 bits), instruction format, memory
  layout, tiling, the memory port, and the bit-index encoding are not given
  by the published design and were chosen here.
* Which nibble of a PE carries which channel (channel r low, r+32 high) and
  that the activation is the X1/X3 operand are choices.
* The published design aligns "64 16-bit values" per array in 4-bit mode;
  here they are carried as two 16-bit lanes of the 32-bit partial-sum
  register. Extraction positions can differ per 32-channel half and per
  output column, not per single input channel: a finer choice would need
  one aligned sum per channel.
* Run-time extraction covers the activation index only, per 32-channel half
  and pixel tile. Weight indices are always static. The published design
  describes the run-time search both per channel group and per channel;
  the half-group is the finest unit this datapath can align. Here the search
  is an extra pass over the activations, which costs far more than the 2-5 %
  overhead reported for the published design. How that design hides the
  search is not described.
* The SIMD stage only requantises and applies ReLU. Pooling, residual
  addition, im2col, softmax, normalisation and other vector operations of a
  full NPU vector unit are not built.
* The first layer of a CNN (3 input channels) is expected to run elsewhere.
* Phases do not overlap (no double buffering), so the array idles while a
  group is loaded.
* There is no 2-bit mode.

## 12. Simulation

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

    verilator --binary --timing --assert -y rtl -y tb rtl/flexiq_pkg.sv \
        tb/tb_pe.sv --top-module tb_pe -Mdir obj_pe
    ./obj_pe/Vtb_pe

Replace `tb_pe` with any of `tb_systolic_array`, `tb_bit_index_mux`,
`tb_bit_range_detect`, `tb_operand_buffer`, `tb_accumulator`,
`tb_simd_unit`, `tb_output_buffer`, `tb_instr_mem`, `tb_channel_permute`,
`tb_flexiq_npu` or `tb_resnet18_layers`.

* `tb_pe` checks every operand pair in both modes.
* `tb_systolic_array` compares against matrix products, checks the
  ROWS + COLS - 1 latency and alternates precisions back to back with no gap.
* `tb_flexiq_npu` runs the full-size top (no parameter overrides) against a
  behavioural memory (`offchip_mem_model`, random back-pressure, fixed
  latency). Its program has a layer with a 4-bit to 8-bit switch and
  saturating static indices, a 4-bit layer with run-time indices (different
  for the two halves of a group), the
  reordered copy and two output tiles, and an 8-bit layer of 300 vectors (two
  pixel tiles) that is then rewritten to 4-bit and run again. Every output
  byte is compared with a reference model written with real-number rounding,
  and each mechanism (4-bit group, 8-bit group, precision switch, run-time
  index, saturation, reorder store, ratio rewrite, output tiling, pixel
  tiling, back-pressure) is counted and must occur. It runs in about a second.
* `tb_resnet18_layers` runs four ResNet-18 layer shapes at full size
  (section 13) with random data, checks every output byte, and checks that
  the stage-4 convolution takes fewer cycles at 100 % than at 0 % 4-bit. It
  runs for about two minutes.

## 13. What fits

Sizes below are standard model shapes. For ResNet-18 at 224 x 224 without
its first layer, each of the 19 remaining convolutions and the classifier is
one instruction (20 of 64 entries). The largest layer has 3 x 3 x 512 = 4608
reduction channels (a multiple of 64, so every 4-bit ratio step of 64
channels exists), up to 56 x 56 = 3136 vectors (tiled by 256 on chip) and up
to 512 output channels (16 tiles; the 1000-class classifier is padded to 32
tiles). The largest weight tensor is 73,728 memory words and the whole model
about 366 K words of a 16 M-word address space. ResNet-34, ResNet-50,
ResNet-20 (with padding of its 16-channel layers) and MobileNetV2 (depthwise
layers only as zero-padded dense layers) also fit in 64 instructions.
Vision transformers do not run on this NPU alone: their linear layers fit,
but the attention products multiply two activations and their softmax and
normalisation need vector operations that are not built.

`tb_resnet18_layers` measured these cycle counts, with a memory that refuses
20 % of requests at random and answers after 4 cycles:

| layer shape (im2col)                         | 4-bit share | cycles  |
|----------------------------------------------|-------------|---------|
| 3x3 conv, 576 ch, 56x56 vectors, 64 outputs  | 256 of 576  | 318,150 |
| 1x1 conv, 64 ch, 28x28 vectors, 128 outputs  | 100 %       | 32,438  |
| 3x3 conv, 2304 ch, 14x14 vectors, 256 outputs | 50 %       | 303,766 |
| 3x3 conv, 4608 ch, 7x7 vectors, 512 outputs  | 0 %         | 614,263 |
| same                                         | 100 %       | 425,115 |

Going from 0 % to 100 % 4-bit saves only 31 % on the last layer, because
with 49 vectors per tile the array streams for a small part of each group
and the serial weight and activation loads dominate (section 7). Overlapping
loads with streaming would bring the saving closer to the 50 % that the
halved number of groups allows.
