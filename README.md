# One datapath for convolution and deconvolution

Segmentation networks such as SegNet have an encoder built from 3x3
convolutions and a decoder built from 3x3, stride-2 deconvolutions
(transposed convolutions). A deconvolution is usually computed by
inserting zeros between the input pixels and running an ordinary
convolution over the result. Three quarters of the multiplications then
have a zero operand. Another option is to scatter every input pixel times
the whole kernel into a temporary buffer and add up the overlaps, but that
costs extra memory traffic.

This accelerator takes a third route. Consider one 2x2 patch of input
pixels

    a b
    c d

of a map padded on the top and left, and a 3x3 kernel K that has already
been rotated by 180 degrees. The 2x2 block of deconvolution output that
belongs to this patch is

    O(2i,   2j  ) = a*K11 + b*K13 + c*K31 + d*K33
    O(2i,   2j+1) = b*K12 + d*K32
    O(2i+1, 2j  ) = c*K21 + d*K23
    O(2i+1, 2j+1) = d*K22

That is exactly nine multiplications, one per kernel tap, and five
additions. A convolution output pixel also takes nine multiplications, one
per tap, plus a sum. The same nine multipliers therefore serve both
operations. Only the pixel routed to each multiplier changes, and which
partial sums are tapped from the adder tree.

The RTL is written in SystemVerilog. It holds one array of 8 x 8 such
process elements (576 multipliers), plus the buffers and the control
around it. It streams 64-bit words in and out, where one word is one pixel
position of eight 8-bit channels.

## Data path

```
 input stream ─┬─> line buffer ──> IF buffer (2 banks) ──> shift register ──> PE array
               │   (zero padding)  (3x1 columns)           (3x3 window)      (8x8 PEs)
               └─> weight buffer ─────────────────────────────────────────────┘  │
                                                                                 v
 output stream <── OF buffer <── pooling <── activation <── batch norm <── partial-sum buffer
                                                                       <── output serializer
```

| stage | module | what it does | latency |
|---|---|---|---|
| line buffer | `line_buffer` with `padding_ctrl`, 3 x `sync_fifo` | turns the raster stream into zero-padded 3x1 column vectors | see below |
| IF buffer | `if_buffer` | two banks of column vectors; one fills while the other is read | 1 |
| shift register | `window_shift_reg` | keeps the last three columns and so forms the 3x3 window | 1 |
| PE array | `pe_array` of `process_element` | 9 multipliers per PE, adder tree, sum over the 8 input channels | 3 |
| output serializer | `out_serializer` | sends the 4 deconvolution pixels out one per cycle, with their addresses | 1 |
| partial-sum buffer | `psum_buffer` | 32-bit accumulators across input-channel groups | 2 |
| batch norm | `batch_norm` | `sat8((x*scale + bias) >>> shift)` per output channel | 2 |
| activation | `activation` | bypass, ReLU, or LeakyReLU with slope 1/8 | 1 |
| pooling | `pooling` | bypass, or 2x2 max or average with stride 2 | 1 |
| OF buffer | `of_buffer` | output map, written by address and read out as a stream | |
| control | `config_regfile`, `system_controller` | the pre-loaded job list, and the FSMs that run it | |

Shared types and constants are in `cnn_pkg`. `pipe_delay` delays the
controller's tag (the output address, whether this is the first or last
input group, and so on) so that it meets the data at the PE array output.

## The process element (`process_element.sv`)

Multiplier k (k = 3*ky + kx) is always fed kernel tap K[ky][kx]. The
pixel side works as follows:

* **Convolution:** multiplier k gets window pixel (ky, kx).
* **Deconvolution:** the patch a, b, c, d is the top-left 2x2 of the same
  3x3 window. The multipliers get a, b, b / c, d, d / c, d, d in tap
  order, so each tap meets the one pixel it multiplies in the equations
  above.

The adder tree is ordered so that the deconvolution sums are its inner
nodes:

* level 1: `p0+p2` (K11+K13), `p6+p8` (K31+K33), `p1+p7` (K12+K32),
  `p3+p5` (K21+K23);
* level 2 and up: pairwise sums of these;
* last: `+p4` (K22).

In convolution mode the root is the result. In deconvolution mode the four
outputs are `(p0+p2)+(p6+p8)`, `p1+p7`, `p3+p5` and `p4`. Both modes use
the same eight adders. Products are registered, and so is the tree.

`pe_array` places 8 x 8 PEs: input channel i and output channel o form
one PE. It then adds the eight input-channel results of each output
channel in one more registered stage. Sums are 20 bits inside a PE and 32
bits after the reduction.

## Line buffer and zero padding (`padding_ctrl.sv`, `line_buffer.sv`)

Three first-word-fall-through FIFOs, each one row long, are chained:

* the input stream enters FIFO 0;
* a word popped from FIFO 0 is pushed into FIFO 1, and from FIFO 1 into
  FIFO 2.

Each FIFO output passes through a 2-input mux whose other input is zero.
The three mux outputs form one column vector: top (FIFO 2), middle
(FIFO 1) and bottom (FIFO 0).

The padding controller walks the padded map one position per cycle. It
sets the push and pop of each FIFO, decides whether a stream word is
consumed, and decides which mux outputs zero: padding positions take the
mux's zero input and read no FIFO. The padding mode has one flag per
side (top, bottom, left, right). This lets a layer that is too large for
the IF buffer run as horizontal strips:

* the top strip is padded on the top, left and right;
* middle strips on the left and right only;
* the bottom strip on the bottom, left and right;
* a deconvolution tile is padded on all sides (or on the top and left
  only).

An `in_h` x `in_w` tile with padded size `Hp` x `Wp` yields `(Hp-2)*Wp`
column vectors, one per cycle when the stream keeps up. The line buffer
stalls the stream (`s_ready` low) while it emits padding.

Deconvolution reuses the same padding, because its 2x2 patch is the
top-left of the 3x3 window. The extra right column and bottom row of
padding only add windows that the controller discards.

## Running a layer: jobs, tiles and the stream format

The host writes 64-bit job descriptors (`cnn_pkg::job_t`) into the
register file through `cfg_we`/`cfg_waddr`/`cfg_wdata`. It then pulses
`start` with `n_jobs`. A job is one tile of one layer, described by these
fields:

* mode (convolution or deconvolution);
* padding flags;
* `in_w`, `in_h`;
* `ci_groups` and `co_groups` (channels / 8);
* activation mode and pooling mode;
* `bn_shift`.

For each job the input stream must carry, in this order:

1. **Parameters:** `ci_groups*co_groups` weight sets of 72 words, the set
   for (gi, go) first at word `(gi*co_groups + go)*72`. They are followed
   by `co_groups` batch-norm sets of 6 words. Inside a weight set, byte
   `n = (o*8 + i)*9 + 3*ky + kx` is byte `n % 8` of word `n / 8`, with
   byte 0 in bits 7:0. A batch-norm set holds eight 16-bit scales (words
   0-1), then eight 32-bit biases (words 2-5).
2. **Input tiles:** `ci_groups` tiles of `in_h x in_w` words in raster
   order, one per input channel group.

The controller runs two FSMs:

* **Loader:** stores the parameters, then sends each tile through the line
  buffer into whichever IF bank is free.
* **Compute FSM:** works through input group gi (outer loop) and output
  group go (inner loop). For each pair it loads the weight set into the
  PE registers (81 cycles), reads the bank, and then waits 24 cycles for
  the pipeline to empty.

Because there are two IF banks, the next tile loads while the current one
is computed. The first input group writes fresh partial sums; later groups
add to them. Only the last group passes its sums on through batch norm,
activation and pooling into the OF buffer. When the job is done, the OF
buffer streams `co_groups` output planes in raster order, with
`m_axis_tlast` on the last word.

**Issue rate.**

* A convolution pass reads one column per cycle. Its run phase lasts
  `(Hp-2)*Wp` cycles; the two windows per row that straddle the row start
  are discarded.
* A deconvolution pass reads one column every four cycles. The serializer
  then writes the PE array's four results to the partial-sum buffer on
  four consecutive cycles, at addresses `A`, `A+1`, `A+Wo`, `A+Wo+1`.

The whole back end therefore handles one 8-channel pixel per cycle in
both modes. A deconvolution pass produces four times as many pixels as a
convolution pass over the same input, and takes four times as long.

**Addresses.**

* A convolution output has `(Hp-2) x (Wp-2)` pixels.
* A deconvolution output has `2(Hp-2) x 2(Wp-2)` pixels.
* Output group go is stored at `go *` (pixels per group).

Pooling is applied to convolution jobs only (it is forced to bypass for
deconvolution). It halves the output and drops an odd last row or column.

## Capacity at the default parameters

| buffer | default | limits a job to |
|---|---|---|
| line-buffer FIFOs (`MAX_W`) | 480 words | `in_w + 2 <= 482` |
| IF buffer (`IF_DEPTH`) | 2 x 2048 column vectors | `(Hp-2)*Wp <= 2048` |
| weight buffer (`WB_DEPTH`) | 8192 words | `ci*co*72 + co*6 <= 8192`, e.g. 64 in x 64 out channels |
| partial-sum buffer (`PSUM_DEPTH`) | 16384 x 8 x 32 bit | `co_groups * output pixels <= 16384` |
| OF buffer (`OF_DEPTH`) | 16384 words | same as the partial-sum buffer |

Here are some worked examples:

* A 64-channel 360x480 layer runs as strips of 4 output rows
  (4 x 482 = 1928 columns; 8 groups x 4 x 480 = 15360 sums).
* A 90x120 convolution runs as six strips of 15 rows.
* A 45x60 deconvolution runs as two strips.

The conv pass of the 90x120 map takes 90 x 122 = 10980 run cycles. The
deconvolution of the pooled 45x60 map takes 4 x 45 x 62 = 11160. The two
are about the same. The controller asserts these fit rules during
simulation.

## Where this design departs from, or adds to, the published architecture

* **Array shape.** The published design has 576 DSPs, a 64-bit data path
  and a single PE array. The split into 8 input x 8 output channels is
  inferred from those numbers.
* **Batch normalisation** is a separate stage after the partial-sum
  buffer, as drawn in the block diagram. The text says it is folded into
  the process element instead. Here, scale and bias must be applied to
  the complete sum over all input groups, so the separate stage is used.
  Requantisation (`>>> bn_shift`, then saturation to 8 bits) is this
  design's choice.
* **Partial-sum buffer and output serializer** are drawn as separate
  blocks here. The published description only says that partial sums stay
  in block RAM, and that the four deconvolution pixels enter the output
  buffer serially.
* **Formats and sizes of my own choosing:**
  * the LeakyReLU slope (1/8);
  * average-pool rounding (toward minus infinity);
  * the job format;
  * the stream order and parameter layout;
  * the 24-cycle pipeline flush;
  * the loop order (input group outer);
  * every buffer depth.
* **Not included:** the Zynq processing system (ARM host, DMAs, HP ports,
  DDR). The top level exposes AXI-Stream-style `valid`/`ready` ports where
  the DMAs would connect, and a plain register write port for the host.
* **Not done by the hardware:**
  * Weights are not prefetched. Each (gi, go) pass reloads its weight set
    in 81 cycles.
  * Strips are not stitched together. The host sends each strip with its
    halo rows as a separate job, and assembles the output.
* **Not checked:** the 220 MHz clock target.

## Verification

Every module has a self-checking testbench in `tb/`, named
`tb_<module>.sv`, with a watchdog. Each one prints
`TB_RESULT checks=<n> failures=<n>` at the end. Expected values are
computed inside the testbench from independent reference code.

`tb_accel_top` runs the top level at its default parameters. It runs five
jobs back to back with random data, random input gaps and random output
back-pressure:

1. a 2-in/2-out-group convolution with ReLU and max pooling;
2. a deconvolution with LeakyReLU;
3. an unpadded middle strip with average pooling;
4. a top strip with three input groups;
5. a deconvolution padded on top and left only.

The reference model is direct 3x3 correlation for convolution. For
deconvolution it is correlation over the zero-inserted map (input pixel
(r, c) placed at (2r, 2c)). So it checks the patch equations above
against the textbook definition rather than against themselves. The
testbench also checks:

* the run-phase cycle count of every pass;
* that each mechanism occurred at least once: padding, input stall,
  output stall, both IF banks in use, accumulation over input groups,
  every activation and pooling mode, saturation, and both PE modes.

Two more testbenches run layer-sized work at the default parameters:

* `tb_latency_workload` runs two layers back to back:
  * a 90x120, 8-channel convolution with ReLU and max pooling, run as six
    strips;
  * the deconvolution of its 45x60 result, run as two strips.

  It checks every word against a reference computed for whole maps, so it
  also shows that strips with halo rows join seamlessly. The convolution
  takes 10980 PE-array cycles and the deconvolution 11154, so the two
  layers cost the same time. Both layers take 53516 busy cycles in all.
* `tb_segnet_layer` runs one strip of a 64-in/64-out-channel layer at
  480 pixels width, and one 64-channel deconvolution strip. These fill
  the IF bank, partial-sum buffer, line-buffer rows and weight buffer
  close to their limits. It takes about 306k cycles; a whole 360x480 layer
  is 90 such strips.

Simulate with Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_accel_top \
    rtl/cnn_pkg.sv $(ls rtl/*.sv | grep -v cnn_pkg) tb/tb_accel_top.sv
./obj_dir/Vtb_accel_top
```

The package must come first. The other testbenches build the same way
with their own top module. The full-size run takes well under a minute.

Lint reports a few warnings that do not affect the circuit:

* unused bits of wide products and descriptor fields;
* the `reserved` and `spare` fields of `job_t`;
* optional status outputs left open in the top level.
