# Tilted-layer-fusion super-resolution accelerator (SystemVerilog)

This is RTL for a convolutional super-resolution engine. It turns a 640 x 360 RGB frame into
the 27 sub-pixel channels of a 1920 x 1080 (x3) frame, fast enough for 60 frames/s at 600 MHz.
No feature map of the seven-layer network ever leaves the chip. The 8-bit input pixels,
weights and biases are read once, and the output is written once.

The main idea is the **tilted tile**. A frame is cut into tiles of 60 rows x 8 columns, and all
seven layers of a tile are computed before the next tile starts (layer fusion). A 3x3
convolution needs one column of neighbours on each side, so a plain rectangular tile would
either need the next tile's data at its right edge or would lose information there. Here, layer
`l` of tile `t` computes image columns `8t - l ... 8t - l + 7`, one column further left for every
layer. So when the tile is stacked along the layer axis it forms a parallelogram (the "tilt").

The right-hand neighbour that layer `l` needs is then always the last column that layer `l-1`
of the same tile has just produced. The left-hand neighbours are the last two columns of layer
`l-1` from the previous tile. Those are kept in a small queue, the overlap buffer. Only the top
and bottom edges of a 60-row strip are zero-padded, as if each strip were a separate image.
That is the one place where the result differs from convolving the whole frame.

The design follows a published architecture: 28 PE blocks, a two-stage accumulator, ReLU, two
ping-pong tile buffers, an overlap buffer, and weight, bias and residual SRAMs. The paper leaves
several parts unspecified, and this design supplies them. These are marked below and in the
header comment of each file.

## 1. The network and its number formats

| layer | in ch | out ch | operation | added operand |
|---|---|---|---|---|
| 1 | 3 | 28 | 3x3 conv, ReLU | bias |
| 2-6 | 28 | 28 | 3x3 conv, ReLU | bias |
| 7 | 28 | 27 | 3x3 conv | input pixel (residual / anchor) |

- Output channel `c` of layer 7 gets the input pixel of colour `c mod 3` as its residual. The
  anchor repeats the RGB input nine times.
- The 27 channels are the 3 x 3 sub-pixels x 3 colours of each low-resolution position. The
  depth-to-space rearrangement is left to whoever consumes the output stream.
- Numbers:
  - Pixels and feature maps are unsigned 8-bit.
  - Weights and biases are signed 8-bit.
  - PE partial sums are 20-bit and the accumulator is 28-bit.
- Fixed point (this design's choice; the paper gives no quantisation scheme):
  - Before the add, the bias or residual is shifted left by `cfg_addend_shift[l]`.
  - The activation stage then computes
    `clip(0, 255, (acc + 2^(s-1)) >>> s)` with `s = cfg_out_shift[l]`.
  - For layers 1-6 this is ReLU with saturation. For layer 7 it is the clip of the image to
    valid pixel values.

## 2. Tile geometry

A frame is processed as `cfg_strips` strips of 60 rows. Each strip is processed as
`cfg_tiles_x + 1` tiles of 8 columns, from left to right.

| data | image columns | where it lives |
|---|---|---|
| input of tile t | 8t .. 8t+7 | left ping-pong buffer, columns 0..7 |
| layer l output, tile t | 8t-l .. 8t-l+7 | ping-pong buffer (parity of l), columns 0..7 |
| layer l input window, tile t | 8t-l-1 .. 8t-l+8 | 2 columns from the overlap buffer + 8 from the ping-pong buffer |
| residual for layer 7, tile t | 8t-7 .. 8t | residual SRAM, 15-column circular store |

- **Extra tile at the right edge.** Layer 7 of the last real tile ends seven columns short of
  the image edge. An extra tile per strip, whose input columns lie outside the image, produces
  the missing columns. Its input columns are written as zeros, and nothing is taken from the
  input stream for them.
- **Zero padding.** Every input column outside the image (`x < 0` or `x >= width`) and every
  row outside the strip reads as zero. This happens when the column is fetched, so the buffers
  never need clearing.
- **Overlap queue (9 slots of 2 columns x 60 rows x 28 channels).** While layer `l` of tile `t`
  runs, the queue holds:
  - layers `l-1 .. 6` of tile `t-1`
  - layers `0 .. l-1` of tile `t`
  - the slot being written with layer `l`

  That is exactly `7 + 2` slots. Only the front index is stored:
  - the front slot is read, and holds layer `l-1` of tile `t-1`;
  - the back slot, `front + 8 (mod 9)`, is written with output columns 6-7;
  - while a tile is loaded, its input columns 6-7 go to slot `front + 7`;
  - after every layer the front is popped.
- **Residual store.** The last layer of tile `t` needs input columns `8t-7 .. 8t`, which were
  loaded partly with tile `t-1`. So the residual SRAM keeps `8 + 7 = 15` columns in a ring. Its
  base pointer moves by 8 (mod 15) per tile and is reset at each strip.

## 3. Compute dataflow

**PE array** (`pe_array`).
- Input broadcasting: seven pixels of one input column go along the rows, three weights of one
  kernel column go along the columns.
- MAC `(r, k)` multiplies pixel `r + k` by weight `k`. The products on each diagonal are summed,
  giving five outputs `psum[r] = sum_k in[r+k] * w[k]`.

**PE block** (`pe_block`, 28 of them, one per input channel).
- Array `k` gets window column `k` and kernel column `k`.
- Together the three arrays hold every product of a 3x3 convolution for five vertically
  adjacent outputs. That is 1260 MACs per cycle in all.

**Schedule** (`tlf_controller`). For each layer of a tile, in order:

```
for group g in 0..11          (rows 5g .. 5g+4, window rows 5g-1 .. 5g+5)
  shift 3 columns into the window
  for output column j in 0..7
    for output channel o in 0..27 (0..26 in layer 7)   -> one compute cycle
    shift the next column in (hidden behind the last channel when it is ready)
```

- The window (3 columns x 7 rows x 28 channels) is reused for 27-28 cycles. Meanwhile the
  weight SRAM delivers a new 252-byte word every cycle: the 3x3 kernels of one output channel
  for all input channels.
- The weight address is taken from the controller's next-state values, so that the weights of
  a cycle arrive in that cycle.

**Column fetcher** (`column_fetcher`, this design's own).
- Reads one row word (all 28 channels) per cycle from the overlap buffer (window columns 0-1)
  or the ping-pong buffer (columns 2-9).
- Assembles the words into 7-row columns and keeps up to three columns in a FIFO. A credit
  counter makes sure a column is started only when it will find room in the FIFO.
- A column takes 7 reads, so the fetch time hides behind compute. The exception is the start of
  a layer, where the schedule waits for the first columns. The FIFO of three columns covers the
  three shifts at the start of every row group.

**Accumulator** (`accumulator`, 3 cycles).
- Input register bank.
- Stage 1: adds the three arrays of each block and reduces the 28 block sums to 4 per row
  (first partial tree).
- Stage 2: the second partial tree, plus the operand chosen by the bias/residual multiplexer.
  The operand is registered beside stage 1.

**Activation** (`activation`, 1 cycle): rounding shift, ReLU and saturation.

**Write-back** (`output_writer`, this design's own).
- Layers 1-6: the 28 channels of a 5-pixel column are gathered and written as 5 row words into
  the other ping-pong buffer. Columns 6 and 7 are also written into the overlap buffer's back
  slot.
- Layer 7: results go straight to the output stream.
- A layer starts only after the previous one is fully written. Row group 0 of layer `l` already
  needs row 5 of layer `l-1`, so little could be overlapped anyway.

**Cycle budget.** A full tile costs:

| part | cycles |
|---|---|
| compute: `12 x 8 x 28` per layer (27 channels in layer 7) | 18,720 |
| window shifts: 2 extra cycles per row group | about 170 |
| pipeline drain: about 35 per layer | about 250 |
| load: one RGB pixel per cycle | 480 |

A 640 x 360 frame is 6 x 81 tiles. It has to fit in 10,000,000 cycles, which is 60 frames/s
at 600 MHz. Measured, a tile takes at most 19,108 compute cycles plus 480 load cycles, and the
whole frame takes 9,519,769 cycles.

Two derived figures agree with the published ones:

- MAC utilisation averaged over the seven layers is (3/28 + 5 + 27/28) / 7, about 87%.
  Only layer 1 (3 input channels) and layer 7 (27 output channels) leave blocks idle.
- Off-chip traffic at 60 frames/s is 41 MB/s of input plus 373 MB/s of output, about 0.41 GB/s.

## 4. Memories

| buffer | organisation | bytes | paper |
|---|---|---|---|
| left + right ping-pong | 2 x 480 words x 28 B | 26,880 | 26.88 KB |
| overlap | 9 slots x 2 cols x 60 rows x 28 B | 30,240 | 30.24 KB |
| residual | 15 cols x 12 groups x (5 rows x 3 B) | 2,700 | 2.7 KB |
| bias | 168 x 1 B | 168 | 168 B |
| weight | 196 words x 252 B | 49,392 | 42.54 KB |

All memories are written as plain arrays with synchronous read, one read port and one write
port. A real implementation would map them to SRAM macros.

The weight memory is larger than the paper's figure, for two reasons:
- Layer 1 is padded to 28 input channels, so that one word feeds all blocks.
- The network as described (3 -> 28, five 28 -> 28, 28 -> 27) has 42,840 bytes of weights. That
  already differs from the quoted 42.54 KB.

## 5. Using the top level (`sr_accel_top`)

**Before the frame.**
- Write the weight words: `wt_waddr = (layer-1)*28 + out_channel`. Each word is
  `wword_t = [input channel][kernel column dx][kernel row dy]`, 8-bit signed.
- Write the biases: `bias_waddr = (layer-1)*28 + out_channel`, for layers 1-6.
- Set the two shift arrays.

**Starting the frame.** Pulse `start` with `cfg_tiles_x = width / 8` and
`cfg_strips = height / 60`. The limits are 127 tiles and 7 strips.

**Input.** Stream the frame through `in_valid` / `in_ready` / `in_pix[3]`:
- strip by strip, then tile by tile;
- within a tile, column by column, 60 rows top to bottom;
- nothing is sent for the extra right-edge tile.

**Output.** `out_valid` marks a group of 5 results:
- `out_pix[0..4]` are rows `out_y .. out_y + 4` of low-resolution column `out_x` and channel
  `out_ch`.
- High-resolution pixel `(3*y + i, 3*x + j)` of colour `c` is channel `(3*i + j)*3 + c`.
- There is no back-pressure on the output.

`done` pulses when the last tile is finished.

## 6. Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` at the end.

| testbench | what it checks |
|---|---|
| `tb_pe_array` | diagonal sums against direct arithmetic |
| `tb_pe_block` | the three-cycle example of a 7x5 input convolved with 3x3 weights into 5x3 outputs, one output column per cycle |
| `tb_accumulator` | exact sums and operand selection, 3-cycle latency |
| `tb_activation` | rounding, ReLU, saturation |
| `tb_weight_sram`, `tb_bias_sram` | address maps |
| `tb_pingpong_buffer` | role swap |
| `tb_overlap_buffer` | queue contents over five tiles, pointer wrap |
| `tb_residual_sram` | circular column window over two strips |
| `tb_tlf_controller` | compute order, weight look-ahead, exact cycles per tile, pops, flush tile |
| `tb_sr_accel_top` | end to end on a 24 x 120 frame (3 x 2 tiles) against a reference model |
| `tb_sr_accel_full` | a complete 640 x 360 frame, every output pixel against the reference, frame cycle count against 10 M |

More on the two end-to-end tests:
- The reference model is `tb/sr_ref_model.sv`. It is a direct convolution of each strip with
  the same padding and fixed point.
- `tb_sr_accel_top` feeds the input stream with random gaps. It also checks that every
  mechanism occurs at least once: fetch stalls, hidden window shifts, overlap reads and queue
  wrap, ping-pong swaps, bias and residual operands, flush tiles, strip changes, input gaps,
  ReLU and saturation.
- `tb_sr_accel_full` result: the 640 x 360 frame takes 9,519,769 cycles, which is 15.9 ms at
  600 MHz or 63 frames/s. All 6.2 million output values match the reference. The run takes
  about 1.5 minutes in Verilator.

Running a testbench with Verilator: list the package first, then the reference package for the
top-level tests, then the RTL.

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_sr_accel_top \
  rtl/sr_pkg.sv tb/sr_ref_model.sv rtl/*.sv tb/tb_sr_accel_top.sv
./obj_dir/Vtb_sr_accel_top
```

Verilator has only two logic states, so all state that is read is reset or written before use.
The testbenches are written to pass with random initial values (`+verilator+rand+reset+2`).

## 7. Where this design departs from, or adds to, the published description

- **Added by this design.** None of the following is described in the paper:
  - the column fetcher and its FIFO;
  - the output collector;
  - the loop order inside a layer;
  - the extra right-edge tile;
  - the load order;
  - the stream interfaces;
  - the fixed-point shifts;
  - the accumulator width and the 4-way split of its tree.
- **Layer start.** A layer starts only after the previous layer is completely written back. The
  paper says a layer starts as soon as its inputs are ready. Within a 60-row tile, the
  difference is a drain of a few tens of cycles per layer.
- **Weight memory.** It is organised for one-word-per-cycle reads and is therefore about 16%
  larger than the quoted size (section 4).
- **Last layer.** It adds the residual and no bias, as the bias/residual multiplexer and the
  168-byte bias memory imply.
- **Gate count and clock.** Nothing here is tuned for the reported 544 K gates or the 600 MHz
  clock. Cycle counts are checked; timing is not.
