# A vectorwise convolution core in SystemVerilog

This is RTL for the convolution core of the vectorwise CNN accelerator
described in "VWA: Hardware Efficient Vectorwise Accelerator for
Convolutional Neural Network". The core computes a convolution one input
column at a time. A whole column of 7 input pixels is broadcast into a
small 7x3 multiplier array at once, and each weight column of a 3x3
kernel is broadcast down one column of that array. Every product then
lands in the right place of a 3x3 window without any systolic shifting of
data between processing elements. The partial sums are collected by a
fixed tree of adders along the array's diagonals, and then by three small
accumulation stages. The array is optimised for 3x3 kernels. The same
array handles 1x1 and depthwise layers by changing how each multiplier
picks its input and which adders are used.

The core has 8 blocks of 7x3 MACs (168 MACs). They work on 16-bit
fixed-point numbers, with 8 fraction bits by default.

## The idea in one picture

Take a 3x3 convolution over an input tile that is 7 rows high. In one
cycle, block `b` receives:

* one input column `x` of channel `b`: 7 values, one per row of the block;
* one column `wc` of the 3x3 kernel: 3 values, one per column of the
  block.

MAC `(r, c)` multiplies input row `r` by kernel row `c`. The product
`P(r,c)` belongs to output row `r - c` of output column `x - wc`.
Products of the same output row therefore lie on a diagonal of the array,
and the block adds each diagonal in the same cycle:

    o[k] = P(k,2) + P(k-1,1) + P(k-2,0)      k = 0 .. 8

Nine sums come out, for output rows `-2 .. 6` relative to the tile.
`o0..o6` leave the right-hand column. `o7` and `o8` leave the bottom of
columns 1 and 0.

One output column needs the three weight columns of the kernel, each
combined with a different input column. The controller reads input
columns in an order that reuses each column for every output it feeds.
For a strip of four output columns the input order is

    a, b,b, c,c,c, d,d,d, e,e, f

which is 12 reads, each with a different weight column. Every MAC is busy
every cycle. Input column `c` is read three times in a row and meets
weight columns 0, 1 and 2.

## Datapath

```
 data bus ──► input buffer (24 banks x 7 values) ──┐
          └─► weight buffer (2 sets x 8 banks x 3) ─┤
                                                    ▼
                 8 x PE block (7x3 MACs, diagonal / row adders)
                                                    │ 9 sums per block
                 stage 1: per block, sum the weight columns of an output column
                                                    │            └──► depthwise results
                 stage 2: adder tree over the 8 blocks (8 channels)
                                                    │
                 stage 3: sum channel groups; merge tile border ◄──► boundary buffer
                                                    │ 7 finished rows
                 post processing: BN scale/shift, ReLU, 2-column max pool
```

### PE block (`vwa_pe_block`)

Each row of a block sees three input values, one from each of the
block's three input banks. Each MAC picks one of them with a 3-to-1 mux.
The mode decides what the mux selects and which adders are used:

| mode | mux select | sums | use |
|---|---|---|---|
| `PE_DIAG_BANK0` | bank 0 | diagonal | 3x3 stride 1, depthwise |
| `PE_DIAG_ILV` | bank `(r-c) mod 2` | diagonal | 3x3 stride 2: two input columns interleaved over the rows |
| `PE_HORIZ_ELEM` | bank `c` | row: `o[r] = P(r,0)+P(r,1)+P(r,2)` | 1x1: three input channels per block |

Two blocks can be chained into a 14-row block. The lower block's row-0
adders then take the upper block's `o8` and `o7` instead of zero, so the
diagonals continue across the seam. The PE block implements and tests
this chaining. The present controller never enables it (see *Limits*).

A product is `(a*w) >>> 8`, kept to 16 bits, and sums wrap in 16 bits.
The paper fixes neither the rounding nor the overflow behaviour. This
design keeps them simple and exact, so a testbench can reproduce every
bit.

### Three accumulation stages

1. **Stage 1 (`vwa_acc_stage1`, one per block).** It adds the three
   weight-column contributions of one output column. In a strip of up to
   four output columns, up to three sums are open at once. Each sum lives
   in an entry picked by a slot number that the controller sends with the
   read. A `first` flag starts an entry and a `last` flag releases it. For
   1x1 layers, stage 1 instead sums the channel groups of one pixel
   column. Latency is 2 cycles.
2. **Stage 2 (`vwa_acc_tree`).** A balanced adder tree over the 8 blocks,
   which means over 8 input channels. It has one register stage.
3. **Stage 3 (`vwa_acc_stage3`).** It sums channel groups (8 channels per
   group) in four entries, one per column of the current strip. After the
   last group, the column is finished for this tile:
   * rows `o0, o1` complete the two rows that the tile above left open, so
     the partial sums stored for them are read from the boundary buffer
     and added;
   * rows `o7, o8` are stored in the boundary buffer for the tile below;
   * rows `o0..o6` go to post processing.

   1x1 layers bypass stage 3. Latency is 2 cycles.

The result is that tile `t`, which reads input rows `7t .. 7t+6`, emits
finished output rows `7t-2 .. 7t+4`. The first tile has no stored rows to
add (`cfg.first_tile`). Its rows `o0, o1` are the padding rows above the
image, and the consumer discards them.

### Memories

| memory | organisation | size at defaults |
|---|---|---|
| input buffer (`vwa_input_buffer`) | 24 banks, 301 words of 7x16 bits, one read address shared by all banks | 99 KB (paper: 99 KB) |
| weight buffer (`vwa_weight_buffer`) | 2 ping-pong sets x 8 banks x 384 words of 3x16 bits | 36 KB (paper: 36 KB) |
| boundary buffer (`vwa_boundary_buffer`) | 14336 words of 2x16 bits, address `f*(w_in-2) + column` | 56 KB (paper: 56 KB) |
| BN table (in `vwa_top`) | 128 entries of scale and shift | registers |

All reads are registered: data arrives one cycle after the read enable.
The two weight sets are independent. The host can fill one set over the
data bus while a layer computes from the other, which hides the weight
loads behind computation.

### Post processing (`vwa_postproc`)

Each output value goes through these steps:
* BN: `y = sat16(((x * scale) >>> 8) + shift)`, with a Q8 scale and a
  16-bit shift per output channel;
* an optional ReLU;
* optional 2-column max pooling. Pooling pairs even with odd output
  columns of the same channel. If the last column is odd, it is dropped
  (floor pooling).

The paper names BN, activation and pooling but does not describe their
circuits. The formats, the order and the pooling window are this
design's choices.

## Schedules (`vwa_controller`)

A layer tile is described by `cfg` (`vwa_cfg_t`):
* `layer`: `LAYER_CONV3`, `LAYER_DW3` or `LAYER_CONV1`;
* `w_in`: input columns;
* `groups`: channel groups;
* `filters`;
* `first_tile`, `wset`, `relu_en`, `pool_en`.

After `start`, the controller issues one buffer read per cycle until the
tile is done. Each read carries a control bundle (`vwa_ctl_t`) that
travels with the data down the pipeline.

| layer | loop order (outer → inner) | input address | weight address |
|---|---|---|---|
| 3x3 | filter, strip of 4 output columns, group, input column / weight column (`a,b,b,c,c,c,...`) | `g*ceil(w_in/3) + x/3`, bank `x mod 3` | `(f*groups + g)*3 + wc` |
| depthwise 3x3 | group, strip, same inner order | as 3x3 | `g*3 + wc` |
| 1x1 | filter, pixel column, group | `g*w_in + x` | `f*groups + g` |

A 3x3 tile therefore takes `filters * groups * 3 * (w_in - 2)` cycles of
reads. A depthwise tile takes `groups * 3 * (w_in - 2)`. A 1x1 tile takes
`filters * w_in * groups`. Results leave 5 cycles after the last read.
The core checks that it keeps to one read per cycle.

Data layout expected in the buffers:
* **3x3 and depthwise.** Block `b`'s three banks `3b .. 3b+2` hold channel
  `8g+b`. Column `x` (rows `7t .. 7t+6`) is in bank `3b + x mod 3` at
  address `g*ceil(w_in/3) + x/3`. Spreading the columns over all three
  banks lets a tile use the whole buffer. The controller sends the bank
  number with each read (`ctl.bsel`). The top rotates the three bank
  outputs so that the PE's unit-stride mux input sees the column just
  read. Weight bank `b` holds column `wc` of the kernel for channel `8g+b`, with value
  `r` being kernel row `r`.
* **1x1.** Input bank `3b+c` holds channel `24g + 3b + c`. Weight bank `b`,
  value `c`, holds the weight of that same channel.

## Interface of the top (`vwa_top`)

* **Data bus.** `bus_we`, `bus_target` (0 = input buffer, 1 = weight
  buffer, 2 = BN table), `bus_set`, `bus_bank`, `bus_addr` and
  `bus_wdata[7]`. Each write carries one word. A BN entry takes value 0 as
  the scale and value 1 as the shift, at address = channel.
* **Command.** `start` is sampled together with `cfg`. `busy` stays high
  until the last result has left, and `done` pulses once at that point.
* **Results.**
  * `out_valid`, `out_data[7]`, `out_ch`, `out_col`: one output column
    (7 rows) of one channel.
  * `dw_valid`, `dw_data[8][9]`, `dw_grp`, `dw_col`: depthwise results of
    8 channels `8*grp + b`, rows `-2 .. 6`.

The pipeline runs as follows:
* the read is issued in cycle 0;
* the buffer data and PE sums are ready in cycle 1;
* stage 1 finishes in cycle 3, stage 2 in cycle 4 and stage 3 in cycle 6;
* the post-processed result appears in cycle 7.

## Limits and departures from the paper

* **Stride-2 and large kernels are not sequenced.** The stride-2
  interleaved mode exists in the PE block but is not issued. Neither is
  the decomposition of 4x4, 5x5 and 7x7 kernels into 3x3 passes. The
  paper shows these modes but not their loop order or address generation.
* **The 14-row configuration is not sequenced.** The paper's
  (4 blocks x 14 rows) configuration, used for the first layer of the
  networks, is not sequenced. The top ties the cascade off, and stage 2
  has no 4-block mode.
* **Tile and chunk sizes are smaller than the paper's.** A 3x3 tile of
  `G` channel groups needs `G*ceil(w_in/3) <= 301` words per bank. That
  holds 7x6 tiles of up to 1016 channels (`groups` is a 7-bit field), but
  several of the paper's wider tiles for VGG-16 must be narrowed. An
  example is 8 groups x 112 columns, which needs 304 words.
* **Weights must fit one set per `start`.** A set holds at most 384 words
  per bank. The host runs larger layers in filter chunks, with the chunk
  loop outside the tile loop, so that the boundary buffer is only shared
  within a chunk.
* **Not built.** The paper places a memory controller and DRAM around the
  core. Those are not part of this RTL: the data bus takes their place.
  Residual additions and fully connected layers are not described as
  hardware and are not built.
* **Arithmetic is this design's choice.** Product rounding (truncation),
  16-bit wrap-around sums and the BN format are chosen here.

## Verification

Every module has a self-checking testbench in `tb/` named
`tb_<module>`. Each compares against values computed independently from
the definition of the operation. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

`tb_vwa_top` runs the whole core at its default sizes:
* two 3x3 tiles of a 16-channel, 3-filter layer. The second tile merges
  the boundary rows of the first and uses ReLU and pooling. While it
  runs, the 1x1 weights are loaded into the other weight set;
* a 16-channel depthwise layer;
* a 48-channel 1x1 layer.

It counts each mechanism:
* boundary merges;
* partial strips;
* ping-pong writes during compute;
* ReLU clipping;
* pooling;
* depthwise results;
* 1x1 bypasses;
* multi-group accumulation.

A mechanism that never occurs counts as a failure. The testbench also
checks the cycle count of every layer.

Run a testbench with plain Verilator:

```
verilator --binary --timing -Irtl -y rtl -y tb rtl/vwa_pkg.sv tb/tb_vwa_top.sv --top tb_vwa_top
./obj_dir/Vtb_vwa_top
```
