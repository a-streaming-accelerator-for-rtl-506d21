# Streaming 3x3 convolution accelerator with a column buffer

This is synthesizable SystemVerilog for a small CNN accelerator of the streaming kind. The
idea behind it: read the on-chip SRAM as wide words that each hold one column of eight
image rows, and turn every word into eight overlapping 3-row windows straight away. The
sixteen 3x3 convolution units then get new data every cycle and never wait. A 2-row line
buffer covers the rows that a window borrows from the previous band of eight rows, so the
stream also runs straight across band boundaries. Partial sums are accumulated over input
channels in a scratchpad next to the array. A streaming max-pooling block can pool them
before they go back to the SRAM. Large images and layers with many features are processed
in tiles ("image decomposition") and in groups of output features ("feature
decomposition"). A list of commands sets up and runs each tile.

The RTL follows the published architecture of such an accelerator: a 128 KB single-port
buffer bank, a column buffer, 16 CUs of 9 PEs, an accumulation buffer with pooling, and a
128-deep command FIFO. It runs at 16-bit fixed point, and 144 multiplications per cycle
give 144 GOPS at 500 MHz. The publication gives block diagrams and a few numbers but no
encodings, protocols or data layouts. Everything of that kind below is this design's own
choice; the section "How far this follows the published design" lists each one.

## Data layout: bands, lanes and where results go

This is the part to understand first. Almost everything else follows from it.

* **Input word.** A buffer-bank word is 128 bits: eight 16-bit pixels. Word lane `g`
  (0..7) of band `b` holds image row `8b+g`, and all eight lanes are the same column.
* **Input tile.** A tile of `W` columns, `H` rows and `C` channels has `NB = ceil(H/8)`
  bands. It is stored contiguously from `in_base`, channel first, then band, then column:
  `word(ch, b, col) = in_base + (ch*NB + b)*W + col`. The controller reads it with an
  address that simply counts up. It takes `W*NB*C` words in exactly that many cycles, plus
  any cycles spent waiting for weights.
* **Windows.** Group `g` of band `b` is the three rows `8b+g-2, 8b+g-1, 8b+g`. The output
  it produces is therefore the one whose 3x3 window starts at row `t = 8b+g-2`, and the
  scratchpad and the output keep that lane numbering. Rows `t < 0` (groups 0 and 1 of
  band 0) and rows `t > H-3` are garbage and are ignored. With stride `s` only the rows
  with `t mod s == 0` are kept. In 1x1 mode `t = 8b+g`.
* **Output columns.** The window that starts at column `c0` completes when column `c0+2`
  streams in. With stride `s` only `c0 = 0, s, 2s, ...` are computed, so there are
  `(W-3)/s + 1` output columns (`(W-1)/s + 1` for 1x1), numbered densely.
* **Result without pooling.** Feature `f` (0 or 1) is written to the output half at
  `out_base + f*NB*OC + b*OC + oc`, where `OC` is the number of output columns. Lanes keep
  the `t = 8b+g-2` numbering, so a strided layer leaves gaps in the lanes and the result
  is shifted down by two rows. The layer after it is meant to be re-tiled through DRAM,
  which the design leaves to the host.
* **Result with pooling.** A pooling window is `K` kept rows by `K` output columns
  (`K` = 2 or 3), and windows do not overlap. The kept rows are counted in order and cut
  into groups of `K`. A window is reported in the band that holds its last row, in lanes
  `A0, A1, ...` in row order. Word `b*PC + p` of feature `f` (`PC = OC/K`) is written to
  `out_base + f*NB*PC + b*PC + p`. Columns left over at the right edge, and a window that
  is still open at the bottom of the map, are dropped.

The end-to-end testbench (`tb/tb_cnn_accel_top.sv`) contains a reference model that
builds exactly these layouts. Read it as an executable form of this section.

## Pipeline and timing

```
 cycle  T      T+1            T+2                T+3          T+4
        read   SRAM data      column-buffer      PE products  CU adder -> PSUM,
        issued tag_q, weight  groups registered  registered   scratchpad RMW at end
               swap (upd)
```

* The controller issues a read and its **tag**: band, column, first channel, and an
  "update weights" flag on the first word of each channel. The tag travels with the data.
* Weights are swapped **one cycle before** a channel's first word reaches the CUs. At that
  edge the last word of the previous channel is already being multiplied with the old
  weights, so no bubble is needed between channels.
* The CUs present a 16-bit PSUM two cycles after the column that completes a window. The
  accumulation buffer reads and writes the scratchpad word in the same cycle.
* After the last read the controller waits 6 cycles for the pipeline to drain. It then
  starts pooling (if enabled) and the write-back, and pulses `layer_done` once the result
  is in the output half.

## Column buffer (`rtl/col_buffer.sv`)

The row buffer stores lanes 6 and 7 of every column of the band just read: `MAX_COLS`
entries of two pixels, 256 by default. When the next band arrives at the same column, the
entry is read and replaced in the same cycle. Groups 0 and 1 take one or two pixels from
it, and groups 2..7 come straight from the word. So the line buffer costs two rows, not
three, and the SRAM bandwidth equals the array's consumption.

## Convolution unit (`rtl/cu.sv`, `rtl/pe.sv`)

* **PE chain.** Each of the three PE rows is a shift chain. A PE multiplies the pixel at
  its input and hands the pixel to its neighbour through a flip-flop. While column `c`
  enters PE(r,0), PE(r,1) and PE(r,2) hold columns `c-1` and `c-2`. Coefficient `W[i][j]`
  therefore sits in PE(i, 2-j), and the sum of the nine products is the window that
  starts at column `c-2`. Input MUX: row `r` takes group row `r`. In 1x1 mode all rows take
  the newest row, and the 1x1 result is PE(2,0)'s product (coefficient index 8).
* **Fixed point.** Pixels and weights are Q7.8. The adder sums the nine 32-bit products,
  adds `bias << 8` on the first channel only, shifts right by 8 (arithmetic, i.e. rounds
  toward minus infinity) and saturates to 16 bits. Later channels are added in the
  scratchpad with 16-bit saturation. So the result is `sat(sat(p0) + sat(p1) + ...)`,
  applied channel by channel, not one wide sum.
* **Stride counting (EN_Ctrl).** A counter of `(column - 2) mod stride` enables the
  multipliers only on columns that complete a kept window. They are also enabled only in
  CUs whose output row is kept. Disabled multipliers hold their product register.
  Strides 1 to 4 are supported.
* **Weight pre-fetch.** The FC&Control bus writes `{cu_id[3:0], index[3:0]}` into a
  shadow copy: index 0..8 is `W[i][j]` at `3i+j`, and 9 is the bias. `shadow_full` rises
  when all ten have been written. The update pulse copies the shadow to the PEs and
  empties it, so the next channel's weights load while the current channel streams.

The array (`rtl/cu_engine_array.sv`) gives CU `k` group `k mod 8` and output feature
`k div 8`. One pass therefore computes eight rows of **two** output features. It also
numbers the output columns and delays the tag to match the CU latency.

## Accumulation buffer and pooling (`rtl/accu_buffer.sv`, `rtl/pool_module.sv`, `rtl/maxpool_unit.sv`)

Each feature has a scratchpad memory of `SP_DEPTH` = 512 words of eight rows. The word
address is `band*OC + oc`. The number of output columns is learnt from band 0 of
channel 0.

Pooling reads the scratchpad band by band for one feature, then the other:

1. The **input MUX** keeps only the lanes with real outputs: inside the map, and on even
   lanes for stride 2. It packs them into windows of `K` rows. A window started in the
   previous band continues, with `phase` rows already seen.
2. Up to **four max-pool units** each take up to three rows per column (I0..I2) plus their
   feedback register, a four-input compare. After `K` columns the unit presents the
   window maximum.
3. A window still open at the end of a band leaves its partial maximum in the **internal
   (carry) buffer**, one entry per pooled column. The first window of the next band
   merges with it. This is needed because 3 does not divide 8, and because stride 2 leaves
   three kept rows in band 0.
4. Pooled words are written back into the same scratchpad from address 0. Writes always
   trail reads, so nothing unread is overwritten. The write-back phase then copies them
   out.

Only lanes A0..A3 of a pooled word can be used (four units), so lanes A4..A7 are always
zero.

## Commands and interfaces

Commands are 16-bit words, a 4-bit opcode and a 12-bit immediate. The command list of a
network sits in DRAM. After reset the loader (`rtl/cmd_loader.sv`) reads it word by word
from `CMD_BASE` (default 0) through the `cmd_mem_*` port into the 128-deep FIFO. It waits
whenever the FIFO is full, so the list may be longer than 128 words, and it stops after END.
The port protocol: `cmd_mem_req` is held until `cmd_mem_gnt`, then one `cmd_mem_rvalid`
brings the 16-bit word. One request is outstanding at a time.

| opcode | name     | immediate |
|---|---|---|
| 0x1 | IN_BASE  | first word of the input tile in the input half |
| 0x2 | OUT_BASE | first word of the result in the output half |
| 0x3 | WIDTH    | input columns `W` (3..256) |
| 0x4 | HEIGHT   | input rows `H` |
| 0x5 | CHANNELS | input channels `C` |
| 0x6 | MODE     | [2:0] stride 1..4, [3] pool enable, [4] pool 3x3 (else 2x2), [5] input half, [6] 1x1 |
| 0xF | RUN      | run one pass (one tile, two output features); later commands wait until it is done |
| 0xE | END      | last command of the list; the loader stops fetching |
| 0x0 | NOP      | none |

A RUN waits at the head of the FIFO until the host allows it. The host controls the chip
through a 16-bit AXI4-Lite slave (`axi_*`, `rtl/axi_ctrl.sv`):

| byte address | register | access | meaning |
|---|---|---|---|
| 0x0 | CTRL   | r/w | [0] auto-run: RUN commands start without a credit |
| 0x2 | START  | r/w | a write adds one start credit; a read returns the unused credits |
| 0x4 | STATUS | r   | [0] busy, [1] command list loaded, [15:8] words in the FIFO |
| 0x6 | PASSES | r   | finished passes (wraps at 16 bits) |

Each taken RUN uses one credit. So the host can load a tile through the DRAM port, write
START, wait for the pass and read the result back. With auto-run set, the list runs on its
own. A write is accepted when address and data are both valid; responses are always OKAY;
byte strobes are not present.

Other ports of `cnn_accel_top`:

* **`wbus_*`** is the weight bus. `wreq` is high while some CU still lacks its next set.
  A pass does not start a channel until every CU's set is complete (`stall` is high
  meanwhile).
* **`ext_*`** is the DRAM-side port of the buffer bank, one 128-bit word per access with
  one cycle read latency. `ext_addr[12]` selects the half. Use it only while `ext_ready`
  is high; an assertion checks this.
* The two 64 KB halves swap roles with MODE bit 5. Each half is four 16 KB macros, so a
  read of the input and a write of the output never compete for a single-port macro.

A tile must satisfy: `W <= 256` (row buffer), `NB*OC <= 512` (scratchpad), and input and
result within 4096 words of their halves.

## Tiling a network (image and feature decomposition)

The hardware does one pass per RUN: one input tile and two output features. Larger
problems are cut up by the command list:

* split the image into tiles that fit a 64 KB half, overlapping by two rows and columns
  for the 3x3 halo;
* loop over output features two at a time, loading that pair's weights through the
  weight bus.

All input channels of a tile must be in the same pass, because accumulation restarts each
RUN.

For AlexNet:
* Convolution layers 3 to 5 (3x3) fit as tiles of 8 input rows, plus a column split for
  the 384-channel layers (3840 words per tile). Such narrow tiles are limited by the weight
  bus, not by the stream: a channel streams in 15 cycles, but its next weights take 160
  bus words (16 CUs x 10 words). A full 8-row tile of layer 3 (15 x 8 x 256) runs in about
  3,840 stream cycles plus 39,800 stall cycles.
* Layers 1 and 2 (11x11 and 5x5 kernels) run by kernel decomposition, described next.

Kernel decomposition needs no hardware of its own. A KxK kernel is padded with zeros to a
multiple of 3 and cut into 3x3 pieces. Piece (p,q) covers kernel rows 3p..3p+2 and
columns 3q..3q+2. Applied to a copy of the input shifted up by 3p rows and left by 3q
columns, it gives that piece's share of every output. Each shifted copy is stored as one
more input channel, with that piece as its 3x3 weights. The channel accumulation then adds
the pieces, and the bias is added once, on the first channel. Strides work unchanged,
because the shifts move the window origin and not the output grid. The price:
* the input is loaded once per piece (4 times for 5x5, 16 times for 11x11);
* each piece is truncated to Q7.8 on its own, so a result can be up to
  (pieces x channels - 1) LSBs below a single truncation of the whole sum.

Layer 2 (27x27x96, pad 2) becomes 384 channels, in tiles of 8 rows x 10 columns (3840
words). Layer 1 (227x227x3, stride 4) becomes 48 channels, in tiles of 8 rows x 85 columns
(4080 words), with two output rows per tile.
* AlexNet's overlapping 3x3/stride-2 pooling is not supported.

## How far this follows the published design

Taken from the publication: the block structure and its connections; the 16-byte SRAM word
streaming eight pixels per cycle; the two-row row buffer and its remap to eight 3-row
groups; 16 CUs of 9 PEs, with pass-through flip-flops, EN_Ctrl gating for strides above
one, and weight pre-fetch swapped when a channel has been scanned; a PSUM (3x3) and a PSUM
(1x1) output; the 128 KB single-port buffer bank made of eight 16 KB macros; a
scratchpad holding the eight rows of one feature at one column address; max pooling with
an input MUX by stride and pool size, four units of a four-input comparator with
feedback, and an internal buffer for incomplete windows; 2x2 and 3x3 pool sizes; the
128-deep command FIFO filled from DRAM at power-up, a command decoder and a 16-bit AXI
control bus; 16-bit fixed point.

This design's own choices:
* Q7.8 format, truncation and saturation points.
* The bus address map, the command set (including END) and all valid/ready handshakes.
* The AXI register map and the start-credit scheme; the command DRAM port and its base
  address.
* The split of the bank into input and output halves.
* The mapping of 16 CUs onto 8 groups x 2 features.
* Which PE gives the 1x1 result, and the MUX rule in 1x1 mode.
* Non-overlapping pooling and the carry-buffer scheme.
* The data layouts above.
* Kernel decomposition done purely by data layout (shifted input copies as extra
  channels); the publication names kernel decomposition without describing it.
* Memory depths: row buffer 256 columns, scratchpad 512 words per feature, carry buffer
  128 pooled columns.

Not built:
* Overlapping pooling.
* The DRAM, DMA and host processor, which are outside the chip.
* Re-tiling between layers, which is left to the host.

The SRAM macro (`rtl/sram_sp.sv`) is a plain synchronous array standing in for a
compiler-generated macro.

## Files

| file | block |
|---|---|
| `rtl/cnn_pkg.sv` | shared types: pixel, word, tag, layer configuration, opcodes, saturation |
| `rtl/cnn_accel_top.sv` | top level, wiring of the blocks below |
| `rtl/axi_ctrl.sv` | 16-bit AXI4-Lite control slave |
| `rtl/cmd_loader.sv` | fetches the command list from DRAM into the FIFO |
| `rtl/cmd_fifo.sv`, `rtl/instr_decoder.sv` | command FIFO and decoder |
| `rtl/layer_ctrl.sv` | pass sequencer: address/tag generation, weight stall, phases |
| `rtl/buffer_bank.sv`, `rtl/sram_sp.sv` | 128 KB buffer bank of eight 16 KB macros |
| `rtl/col_buffer.sv` | column buffer with 2 x N row buffer |
| `rtl/cu_engine_array.sv`, `rtl/cu.sv`, `rtl/pe.sv` | CU engine array, 3x3 CU, PE |
| `rtl/accu_buffer.sv` | scratchpad accumulation, pooling and write-back phases |
| `rtl/pool_module.sv`, `rtl/maxpool_unit.sv` | streaming max pooling |

Each module has a testbench `tb/tb_<module>.sv` that checks it against an independent
model and ends with a `TB_RESULT checks=N failures=M` line. `tb_cnn_accel_top` runs ten
layers through the whole chip at its default sizes and takes about half a minute. Its
layers cover:
* 3x3 at strides 1 to 4, and 1x1;
* 2x2 and 3x3 pooling, including windows across bands;
* both halves as input;
* an AlexNet layer-3 tile shape, and a full AlexNet layer-3 tile of 8 rows and 256
  channels;
* a 5x5 kernel run by kernel decomposition, also checked against a direct 5x5
  convolution;
* an 80x40 tile.

The whole command list is in a DRAM model before reset and is fetched by the chip. Each
pass is started by an AXI write to START, and the last one by auto-run. The test also
counts that weight stalls, weight swaps, command-FIFO back-pressure and RUNs waiting for
the host all occur. At the end it reads STATUS and PASSES over AXI.

To simulate, list the package first:

```
verilator --binary --timing --assert -Wno-fatal rtl/cnn_pkg.sv \
    $(ls rtl/*.sv | grep -v cnn_pkg) tb/tb_cnn_accel_top.sv --top-module tb_cnn_accel_top
./obj_dir/Vtb_cnn_accel_top
```

For one block, replace the testbench and top-module names. The extra files do no harm.
