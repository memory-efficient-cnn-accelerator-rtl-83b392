# A CNN accelerator that keeps interlayer feature maps compressed on chip

Between two convolution layers a CNN accelerator has to park the whole
output feature map somewhere until the next layer reads it. When the map
does not fit on chip it goes to DRAM, and that traffic costs more energy
than the arithmetic. The accelerator described here compresses every
interlayer feature map with the same kind of transform coding that JPEG
uses: an 8x8 DCT, a quantisation that keeps the low frequencies, and a
sparse storage format that drops the zeros. The map is compressed as it
leaves the convolution and decompressed as the next layer reads it, so
the PE array always works on ordinary 16-bit feature values while the
buffer holds only the non-zero quantised coefficients.

This SystemVerilog model covers the datapath and control for 3x3,
stride-1 convolution layers fused with batch normalisation, activation
and pooling, running from an instruction program. The whole chain,
from compressed input to compressed output, is checked value by value
against a software reference.

## Block diagram and data flow of one layer

```
 instruction stream -> instr_queue -> top_ctrl (configuration registers)
                                        | CONV
                                        v
                                    layer_ctrl (sequencer)
 weight stream -> weight_decoder --------------+
                                               v
 buffer_bank --> ifm_path ------------------> pe_array --> scratch_pad_acc
   (input         sparse_decoder, dequantizer, (288 PEs)     (partial sums in
    buffer)       4 x idct_unit                               the scratch pad)
                                                                   |
 buffer_bank <-- ofm_path <------------------ nonlinear <----------+
   (other         4 x dct_unit, quantizer,   (BN, ReLU variants,
    buffer)       sparse_encoder              2x2 pooling)
```

`accel_top` wires these together. The two feature map buffers work as a
ping-pong pair: a layer reads its compressed input from one and writes
its compressed output to the other, and the roles swap after each layer.
The DMA engine and DRAM are outside the model: the top has an
instruction stream port, a weight stream port and a direct port into the
buffer bank (`ddma_*`) that owns the buffers while no layer runs, for
loading the first input and fetching results.

## The compressed format

### Transform

Each channel of the map is cut into 8x8 blocks. A block X is transformed
to Z = C X C^T with the orthonormal 8-point DCT matrix C. The 1-D
transform (`dct_1d`, `idct_1d`) uses the usual even/odd split. The sum and
difference of the column's top half and reversed bottom half feed two
4x4 constant matrices. One holds the even rows of C (constants a, f, g).
The other holds the odd rows (b, c, d, e). That makes 32 constant
multipliers per column. The constants are the cosines scaled by 2^14 and
rounded: a = 5793, b = 8035, c = 6811, d = 4551, e = 1598, f = 7568,
g = 3135. Each output is rounded once.

`dct_unit` does the 2-D transform of one channel with a single 1-D
transform. Phase one takes eight input columns, transforms each and keeps
the results in a transpose register. Phase two reads that register row by
row and sends each row through the same transform. Phase two therefore
emits the rows of Z. The design stores them as columns, so the stored
matrix is S = Z^T and every block is handled as "column i of S" from here
on. A block takes 16 cycles. Four units (128 constant multipliers) work
side by side, one per channel of a 4-channel group. `idct_unit` is the
mirror image. It takes columns of S and returns the columns of the
reconstructed block, also at 16 cycles per block.

Widths: features are 16 bits, the intermediate pass 18 bits, and
coefficients 20 bits.

### Quantisation

Quantisation has two steps (`quantizer`):

1. Scale the coefficient to a small integer: q1 = round(z * q_mult /
   2^q_shift), clipped to +-127 (8 bits).
2. Divide by a quantisation table entry: q = round(q1 / QT[u][v]), with
   rounding half away from zero.

The table is the JPEG luminance table scaled by one of four levels
(L = 0..3, set per layer by a 2-bit field): QT_L = max(1, JPEG * 2^L /
8). Level 3 is the JPEG table itself and level 0 is the finest. Large
entries sit at high frequencies, so most high-frequency coefficients
become zero. `dequantizer` multiplies back: z' = q * QT[u][v] * dq_mult /
2^dq_shift.

The first step is a plain signed scale, without subtracting the map's
minimum. That is a deliberate departure. A min/max offset would move a
zero coefficient away from zero, and then nothing would be left for the
sparse coding to remove. q_mult, q_shift, dq_mult and dq_shift are
per-layer registers, set by software from the statistics of each layer.

### Sparse storage with flipping

`sparse_encoder` stores each quantised 8x8 matrix as two parts:

- a 64-bit index matrix, one bit per position (bit 8*i + r is row r of
  column i), written to the index buffer, one word per block;
- the non-zero values, written to eight SRAM pieces, one per matrix row,
  each piece with its own write pointer.

Non-zeros bunch up in the low-frequency rows, so the first pieces would
fill faster than the last. To even this out, every odd-numbered block is
flipped: its row r goes to piece 7-r. Block 0's long row 0 then shares
piece 0 with block 1's short row 7.

`sparse_decoder` reverses this:

- It reads the index word, which acts as the chip select of each piece.
- For each column it reads only the pieces whose bit is set, each at its
  own read pointer, inserts zeros elsewhere and undoes the flip.
- It reads the next block's index word during the last column of the
  current one, so it delivers one column per cycle with no bubble.

Blocks are stored in the order (input channel group, row frame, block
column, channel). In `ifm_path` the k-th block therefore goes to IDCT
lane k mod 4. The encoder side in `ofm_path` drains its four lanes in the
same order.

## Buffer bank

`buffer_bank` holds the 480 KB of on-chip memory:

| part | size | organisation |
|---|---|---|
| feature map buffer A, B | 128 KB each | 8 pieces x 16384 x 8 bit |
| configurable memory A, B | 64 KB each | two 32 KB sub-banks each (A0, A1, B0, B1) |
| scratch pad | 64 KB | 8 banks x 512 x 128 bit (4 partial sums per word) |
| index buffer | 32 KB | two halves x 2048 x 64 bit |

Each configurable sub-bank serves either its feature map buffer or the
scratch pad, set by a 4-bit register (`cm_sp`). The scratch pad can
therefore be 64, 128 or 192 KB, and each feature map buffer 128, 160 or
192 KB.

Addresses past a buffer's own range go to its sub-banks. For feature maps
the next 4 KB regions are the sub-banks kept for feature maps, in the
order A0 before A1. For the scratch pad the next 256-word regions are the
sub-banks given to it, in the order A0, A1, B0, B1. A sub-bank is built
like a scratch pad bank, with 128-bit words and byte enables, and is
byte-addressed when it holds feature map data. An access outside the
configured size is dropped and raises `oob_error`.

All memories are `sram_1r1w` arrays with one read and one write port and
one cycle of read latency.

## The PE array and the row-frame overlap

This is the least obvious part of the design.

The PE array (`pe_array`) has 288 multipliers: 4 PE groups (one per
input channel of the current 4-channel group) x 8 PE units x 9 PEs. The
input map is processed in row frames of 8 rows, one column at a time. A
column of 8 rows x 4 channels enters every fourth cycle. The three
cycles after it reuse the same data window with the weights of three
more filters, so four output channels are computed per input column in
four cycles.

A PE unit (`pe_unit`) is a 3x3 window: three PE rows, each holding the
last three columns of one input row in a shift register. Output pixel
(r, c) = sum over i, j of input (r+i, c+j) x W(i, j). The unit produces
output column c when input column c+2 arrives. Unit U (1..6) sees input
rows U-1, U, U+1 and produces the complete partial sum of output row
U-1.

Output rows 6 and 7 of a frame need input rows 8 and 9, which belong to
the next frame. The two end units split that work (`pe_data_mux`):

- Unit 7 sees rows 6, 7, 7 with filter rows 0, 1, 0. Its adder has two
  outputs:
  - PSUM''6 = R6·W0 + R7·W1
  - PSUM''7 = R7·W0
  Both are parked until the next frame.
- Unit 0, in the next frame, sees rows 0, 0, 1 with filter rows 2, 1, 2.
  It produces:
  - PSUM'6 = R0·W2
  - PSUM'7 = R0·W1 + R1·W2
  These are the missing parts of the previous frame's rows 6 and 7.

The partial sum adder in `pe_array` then adds the four channels. Each
cycle it delivers ten channel-summed values:

- PSUM0..5 for the current frame;
- PSUM'6 and PSUM'7 for the previous frame;
- PSUM''6 and PSUM''7 for the current frame.

`scratch_pad_acc` stores these in the scratch pad. Bank k holds row k of
every frame. A word holds the four filter lanes of one (frame, column) at
address frame * W + column. The value is written on the first input
channel group and read-modify-written after that:

- PSUM0..5 go into banks 0..5 of the current frame.
- PSUM'6/7 are added to the parked PSUM''6/7 of the previous frame and
  accumulated into banks 6 and 7 of that frame.
- PSUM''6/7 go into a pending row buffer (one entry per column), waiting
  for the next frame.

The same address and lane come back only four cycles later, so the
read-modify-write needs no forwarding. The overlap adds no cycles:
`layer_ctrl` runs one extra row frame of zeros to finish the last
frame's rows 6 and 7, and two extra zero columns per frame to finish the
last two output columns. Padding is zero at the bottom and right; the
output keeps the input's size.

In 1x1 mode (built in `pe_unit`, `pe_data_mux` and `pe_array` but not
issued by the sequencer) all three PE rows of unit U see row U. The nine
weight inputs carry one weight of each of 8 filters, PE (2,2) is off,
and the array delivers 8 rows x 8 filters per cycle.

### Loop order and timing of a layer

For each group of 4 output channels, `layer_ctrl` runs these steps:

1. Restart the decompression path.
2. For each input channel group: wait for its preloaded weights, then
   scan frames 0..H/8 and columns 0..W+1 with four PE cycles per column.
   The next weight set (or the BN parameters after the last group) is
   preloaded into the `weight_decoder` shadow copy during the scan.
3. Read the scratch pad out frame by frame, column by column, through
   `nonlinear` and `ofm_path` into the other buffer.

The PE array is busy for exactly

    cout_grp x cin_grp x (H/8 + 1) x (W + 2) x 4 cycles

per layer, which the end-to-end test checks. The decompression path
matches that rate. The decoder delivers one column per cycle, and each of
the four IDCT lanes turns 8 of them into 8 output columns in 16 cycles,
so a 4-channel column is ready every 4 cycles. Any shortfall stalls the
scan and is counted in `n_stall`.

## Non-linear module

`nonlinear` first requantises a partial sum to 16 bits (round, shift by
`psum_shift`, saturate). It then applies two point-wise slots, optional
2x2 stride-2 pooling (max or average), and two more point-wise slots.
Each slot is off, BN or the activation, so BN, activation and pooling can
come in any order, and unused operations are bypassed. The operations
are:

- BN: y = sat16((x * gamma) >> bn_shift + beta);
- ReLU;
- leaky ReLU with slope 2^-k;
- parametric ReLU with a per-channel slope (8 fraction bits).

gamma, beta and alpha come per output channel through the weight stream.
Pooling works on whole frames:

- An even frame's pooled half-column (4 values) is kept in a small frame
  buffer.
- An odd frame completes it to an 8-row column.
- The pooled map then leaves as whole 8-row frames at one column per two
  input columns.

## Control and instruction set

`instr_queue` stores 64-bit instructions from the instruction stream
while idle. `enable` starts execution in order until an END instruction
or the last stored instruction. `top_ctrl` executes them.

Opcode is in bits [63:60]:

| opcode | name | effect |
|---|---|---|
| 0 | NOP | none |
| 1 | SETREG | register [59:56] = value [31:0] |
| 2 | CONV | run one layer with the current registers; wait until it ends |
| 3 | END | stop; `halted` rises |

Registers:

| reg | fields |
|---|---|
| 0 | w_blk [5:0], h_rf [11:6], cin_grp [17:12], cout_grp [23:18] (map width in 8-column blocks, height in 8-row frames, channel groups of 4) |
| 1 | q_level_in [1:0], q_level_out [3:2], q_shift [8:4], dq_shift [13:9], psum_shift [18:14] |
| 2 | q_mult [15:0], dq_mult [31:16] |
| 3 | non-linear configuration [18:0]: pre_op0, pre_op1, post_op0, post_op1 (2 bits each: none, BN, activation), pool_en, pool_avg, act (ReLU, leaky, PReLU, none), leaky_shift [2:0], bn_shift [3:0] |
| 4 | cm_sp [3:0] (sub-banks A0, A1, B0, B1 to the scratch pad), in_sel [4] (buffer holding the layer input) |

After each layer `in_sel` toggles, so consecutive CONV instructions
ping-pong between the buffers.

Weight stream order, per output group g:

1. For each input group: 144 words for filters f = 0..3, channels
   c = 0..3, taps k = 3i + j.
2. Then 12 words: gamma, beta, alpha for each of the 4 output lanes.

## Where this model departs from the source design or fills gaps

Followed as described:

- the 8x8 DCT with the even/odd constant-multiplier structure;
- two-step quantisation with a JPEG-derived table at four levels selected
  by a 2-bit field;
- the 64-bit index matrix with 8 row-wise SRAM pieces and the flip of
  every second matrix;
- the 480 KB buffer bank split, the configurable sub-banks and the
  ping-pong feature map buffers;
- the 288-PE array of 4 groups x 8 units x 9 PEs, with 4 filters per
  input column in 4 cycles;
- the PE unit 0 / unit 7 PSUM' / PSUM'' scheme;
- the 1x1 mode with 8 of 9 PEs active;
- BN, ReLU variants and pooling in configurable order with bypass;
- the instruction queue, control unit and weight preload FIFO.

Choices made here where the description is silent:

- all number formats and rounding;
- the Q-table scaling per level;
- the index bit layout and the block storage order;
- the memory address map of the configurable sub-banks;
- the pending buffer for PSUM'';
- the loop order and the extra flush frame and columns;
- the instruction set and register map;
- the weight stream order;
- the non-linear formulas;
- the handshakes.

Deliberate departures:

- **No min offset in the first quantisation step.** It is a signed scale,
  as explained above.
- **Two-port memories.** The buffer bank is described as single-port
  SRAM. Here every piece has one read and one write port, so partial
  sums are read and written back in the same cycle. A single-port
  implementation would need banking or a slower accumulation.
- **Instruction loading.** The instruction queue loads its program while
  idle, and `enable` starts execution.

Not built:

- kernels larger than 3x3 (up to 7x7 are stated as supported, without
  saying how the PE units combine for them);
- stride 2 and its column bypass;
- 1x1 layers in the sequencer, although the PE array has the mode;
- depthwise convolution;
- switching compression off for individual layers;
- the DMA controller, a licensed IP block;
- DRAM.

Capacity limits at the default sizes:

- map width at most 256 columns (`MAX_W`);
- at most 63 channel groups (252 channels) per side;
- one layer's compressed input at most 2048 blocks (one index buffer
  half);
- one layer's compressed input at most 16384 non-zeros per piece, more
  when sub-banks are added.

The evaluated networks (VGG-16, ResNet-50, Yolo-v3, MobileNet v1 and v2)
therefore do not run end to end on this model. Their wide early layers,
their channel counts and their 1x1 / stride-2 / depthwise layers each
exceed one of these limits. Deep 3x3 layers with at most 252 channels and at
most 2048 compressed blocks fit, but VGG-16's 256- and 512-channel layers
need 64 or 128 channel groups and just miss the 6-bit group fields.

The decoder keeps reading past the end of a layer's input until it is
restarted. The extra data is dropped when the next output group restarts
the path, and it never reaches the PE array.

## Files

`rtl/accel_pkg.sv` holds the shared types, constants, the JPEG table and
the Q-table function. Every other file in `rtl/` is one module, named
after the file. `sync_fifo` is a small helper FIFO used in the
compression and decompression paths.

Each module has a self-checking testbench `tb/tb_<module>.sv`. The
exceptions are `scratch_pad_acc`, `ifm_path`, `ofm_path`, `layer_ctrl`
and `top_ctrl`, which are checked through the end-to-end test.
`tb/tb_ref_pkg.sv` is the reference model. It builds the DCT matrix from
cos() and computes plain matrix products, not the butterfly of the
hardware.

`tb/tb_accel_top.sv` runs the top at its default sizes (480 KB bank,
256-column maximum width) through an instruction program of two layers:

1. 16x16x8 to 8 filters, BN, max pool, ReLU;
2. 8x8x8 to 4 filters, PReLU then BN, with two sub-banks given to the
   scratch pad.

The second layer reads the first layer's compressed output. The test
checks:

- every output coefficient against the reference;
- the PE-array cycle count;
- that each mechanism happened: zero padding, PSUM' / PSUM'' overlap,
  channel-group accumulation, pooling, BN, PReLU, weight preload and the
  ping-pong swap.

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

## Simulating

With Verilator 5 (timing support needed by the testbenches):

```
verilator --binary --timing -Irtl -Itb rtl/accel_pkg.sv tb/tb_ref_pkg.sv \
    rtl/*.sv tb/tb_accel_top.sv --top-module tb_accel_top -o sim
./obj_dir/sim
```

Any other testbench runs the same way with its own top module. The
end-to-end test takes well under a minute. For a larger test, change the
layer table at the top of the `main` block in `tb_accel_top.sv`. Sizes
must be whole 8x8 blocks and whole groups of 4 channels.
