# MM2IM: a streaming transposed-convolution accelerator in SystemVerilog

Transposed convolution (TCONV) is the upsampling layer of generative
networks (DCGAN, pix2pix, style transfer, super-resolution). A cheap way to
compute it is the *input-oriented* method. Every input pixel is multiplied
with every kernel position of every filter, which is one big matrix product.
The products are then scattered into the larger output image (col2im): input
pixel `(h, w)` and kernel tap `(kh, kw)` land on output pixel

    oh = S*h - pad_top  + kh
    ow = S*w - pad_left + kw

This method has three costs:

* Neighbouring input pixels send products to the same output pixel, so
  partial sums overlap and must be added together.
* Products that land outside the output image are thrown away (cropped).
  Computing them is wasted work. For small layers with large kernels that is
  most of the work.
* The full product matrix (`Ih*Iw` rows by `Ks*Ks*Oc` columns) is far larger
  than the output, so storing it before col2im is out of the question on a
  small FPGA.

MM2IM removes all three. A small hardware **mapper** walks the same loops as
col2im, but ahead of the arithmetic. For every matrix-product row (one input
pixel) it lists only the kernel taps whose product survives the crop. That
list is the **compute map**, *cmap*. With each entry it gives the output pixel
the product belongs to, the **output map**, *omap*.

The processing modules compute only the listed dot products. Each result is
added straight into an accumulator for its output pixel. The product matrix
never exists, cropped products are never computed, and overlapping sums are
coalesced as they arrive.

Output rows are sent out as soon as no later input row can reach them, so the
accumulator memory only needs room for a few output rows.

This repository holds synthesizable SystemVerilog for that accelerator. It
uses the published configuration: 8 processing modules (PMs), 16 int8 MACs
each, and 32-bit AXI-Stream input and output. It also has self-checking
testbenches for every block and for the whole design.

## Contents

- [Worked example](#worked-example)
- [Block structure](#block-structure)
- [The instruction stream](#the-instruction-stream)
- [The mapper](#the-mapper)
- [Inside a processing module](#inside-a-processing-module)
- [Row sequencing in the scheduler](#row-sequencing-in-the-scheduler)
- [The output stream](#the-output-stream)
- [Parameters, memory and the layers that fit](#parameters-memory-and-the-layers-that-fit)
- [Throughput](#throughput)
- [Where this RTL departs from the published design, or fills gaps](#where-this-rtl-departs-from-the-published-design-or-fills-gaps)
- [Verification](#verification)
- [Simulating](#simulating)
- [Changing the design](#changing-the-design)

## Worked example

The layer in the published example has a 2x2 input with 2 channels, two 3x3
filters and stride 1.

- The matrix product has 4 rows (the input pixels) and `3*3*2 = 18` columns,
  so it produces 72 outputs.
- The output is 2x2 (`O = S*I`), with `pad = (Ks-S)/2 = 1`.
- Input pixel (0,0) maps kernel tap `(kh, kw)` to output `(kh-1, kw-1)`. Only
  taps with `kh, kw >= 1` land inside the output: columns 4, 5, 7 and 8, onto
  output pixels 0, 1, 2, 3.
- Each input pixel keeps 4 of its 9 taps. So 40 of the 72 products (55 %) are
  cropped, and a plain matrix-product accelerator would compute them for
  nothing.
- Each output pixel receives exactly one product from every input pixel. All
  four input rows overlap on every output.

`tb_mm2im_mapper` checks this example entry by entry: the kept columns, the
output coordinates and the count of 40 dropped products. `tb_mm2im_top` runs
the same layer through the whole design, with the channels padded to 16.

## Block structure

```
 s_axis ──► Instruction ──┬──► Weight data loader ──► Bias buffer ────────────────┐
            decoder       │         └───────────────► filter buf of PM i          │
            (config regs) ├──► Dynamic input loader ──► Row buffer                │
                          │                               │ broadcast             │
                          └──► Scheduler ─────────────────┤                       ▼
                                 │  start row             ▼                  ┌─────────┐
                                 ├──► MM2IM mapper ──► CMap FIFO ─┬─► PM 0 ..│ PM array│
                                 │                  └► OMap FIFO ─┘   PM 7   └─────────┘
                                 └──► Output crossbar ◄── drain / int8 results ◄──┘
                                          │
                                          ▼ m_axis
```

| Module | Role |
|---|---|
| `mm2im_top` | Wires everything together. Holds the input stream off until the out buffers are cleared after reset (`ready`). |
| `instruction_decoder` | Fetches opcodes, loads the configuration registers, and routes operand words to a loader. |
| `weight_data_loader` | Unpacks a filter batch. Filter *f* goes to PM *f*, its bias to entry *f* of `bias_buffer`. |
| `dynamic_input_loader` | Packs one input row at a time into the shared row buffer. |
| `scheduler` | Sequences a pass. It broadcasts each input row into all PMs, runs the mapper on it, and serves store requests through the crossbar. |
| `mm2im_mapper` | Generates cmap/omap entries, skipping cropped taps. |
| `sync_fifo` | The CMap and OMap buffers, and the FIFO between compute and accumulation unit inside each PM. |
| `pm_array` | X processing modules running in lockstep. |
| `processing_module` | Compute unit → FIFO → accumulation unit → post-processing unit. |
| `compute_unit` | Filter buffer, input row buffer, and a UF-wide int8 dot-product engine. |
| `accumulation_unit` | The "out muxer" and `out_buf`: read-modify-write accumulation at the omap coordinate, plus drain-and-clear. |
| `ppu` | Bias add and int8 requantisation. |
| `output_crossbar` | Drains a finished output row from all PMs and packs it onto `m_axis`. |
| `sdp_ram` | The one memory primitive: simple dual port, registered read. |
| `mm2im_pkg` | Opcodes, configuration struct, map entry types and widths. |

## The instruction stream

All traffic into the accelerator is one stream of 32-bit words. A word that
arrives while the decoder is fetching is an instruction; its opcode is in bits
[7:0].

| Opcode | Meaning | Operand words that follow |
|---|---|---|
| `0x01` | configure | 6 words, see below |
| `0x02` | load filters and biases | `nfilt`, then for each filter: bias (int32), then `Ks*Ks*Ic/4` weight words |
| `0x04` | load input rows | `nrows`, then `nrows` rows of `Iw*Ic/4` words |
| `0x08` | schedule | none; starts a pass with the loaded filters |
| `0x10` | store | none; the next output row is sent on `m_axis`, and the decoder waits until it has been |

The opcode values and their meaning are those of the published design. The
operand formats are this implementation's.

Bytes are little-endian within a word:

- Weights are in `[kh][kw][ic]` order.
- Inputs are in `[iw][ic]` order.
- `Ic` must be a multiple of 16 (UF). A layer with fewer channels is padded by
  the host:
  - each extra input channel holds the input zero point, and its weight is 0;
  - the `FCN` layer (Ic=21, padded to 32) in `tb_mm2im_workloads` does exactly
    this.

Configuration words:

| Word | Contents |
|---|---|
| 0 | `[15:0]` Ih, `[31:16]` Iw |
| 1 | `[15:0]` Ic, `[23:16]` Ks, `[31:24]` S |
| 2 | `[15:0]` Oh, `[31:16]` Ow |
| 3 | `[7:0]` pad_top, `[15:8]` pad_left, `[23:16]` input zero point, `[31:24]` output zero point |
| 4 | requantisation multiplier M (signed) |
| 5 | `[7:0]` requantisation shift |

### How the host drives a layer

The host runs the tiled loop below. It is the driver the testbenches
implement.

- `pad = (Ks-S)/2`.
- `i_end_row[h] = min((h + pad_top) / S, Ih-1)` is the last input row that
  reaches output row `h`.

```
CONFIG
for c in 0 .. Oc-1 step 8:                        # one batch per 8 filters
    LOAD_WGT  nfilt = min(8, Oc-c), biases and filters
    SCHEDULE
    starting = 0
    for h in 0 .. Oh-1:
        if i_end_row[h] >= starting:
            LOAD_IN  rows starting .. i_end_row[h]
        STORE                                     # output row h of channels c .. c+nfilt-1
        starting = i_end_row[h] + 1
```

The filters stay in the PMs for the whole pass (weight stationary). Each
output pixel is accumulated in one place until it is sent (output
stationary). Each input row crosses the stream once per filter batch.

## The mapper

`mm2im_mapper` is started once per input row `h`, for the `Iw` matrix-product
rows `(h, 0) .. (h, Iw-1)`. For every row it steps through the `Ks*Ks` kernel
taps, one tap per clock:

- it forms `oh = S*h - pad_top + kh` and `ow = S*w - pad_left + kw`
  incrementally, so the loop needs no multiplier;
- it emits `{col = kh*Ks+kw, pix = w}` into the CMap FIFO and `{oh, ow}` into
  the OMap FIFO, but only when `0 <= oh < Oh` and `0 <= ow < Ow`.

Cropped taps cost one mapper cycle each and nothing else. A full FIFO stalls
the mapper on a kept tap.

Both maps are generated once and shared by all PMs, because every PM holds a
different filter but sees the same input row.

The published pseudo-code indexes the matrix-product rows with `%` and `/`
swapped relative to its own worked example. This RTL follows the example:
row-major, `h = row / Iw`. The output map is also carried as the pair
`(oh, ow)` rather than the linear index `oh*Ow + ow`, because the
accumulators are organised as a ring of rows (below).

## Inside a processing module

A PM owns one output channel of the current batch.

### Compute unit

The compute unit holds two buffers:

- the PM's filter: `Ks*Ks*Ic` bytes, in words of 16 channels, at address
  `(kh*Ks+kw)*Ic/16 + ic/16`;
- a copy of the current input row: `Iw*Ic` bytes, at `iw*Ic/16 + ic/16`.

A cmap entry `(col, pix)` selects one filter column and one input pixel. The
PE array then multiplies 16 channel pairs per clock, `(x - zp_in) * w`, and
sums them into a 32-bit partial sum. One entry therefore takes `Ic/16` clocks,
and entries follow back to back. The result leaves two clocks after the last
buffer read, together with its omap entry.

### FIFO

An 8-deep FIFO sits between the compute unit and the accumulation unit. The
compute unit only issues reads while the FIFO has room for the two results
that can still be in its pipeline.

### Accumulation unit

`out_buf` holds `OUT_ROWS = 16` output rows of `OW_MAX = 512` 32-bit
accumulators. Output row `oh` lives in slot `oh mod 16`. This is safe for the
following reason:

- While input row `h` is being computed, only output rows
  `S*h-pad .. S*h-pad+Ks-1` are touched, which is `Ks` consecutive rows.
- Every output row above that range has already been drained and cleared.
- So any kernel up to 16x16 fits.

Accumulation is a read in one clock and a write in the next. If the next
partial sum targets the address just written, the written value is forwarded
instead of the stale RAM word. The unit therefore takes one partial sum per
clock with no hazard, even for back-to-back hits on the same pixel.

A drain request reads an accumulator, clears it to zero and returns it two
clocks later. Clearing on drain means the ring slot is clean when the next
output row moves into it. After reset the whole buffer is cleared once, which
takes `16*512` clocks.

### Post-processing unit

The PPU is one clock and turns the drained accumulator into int8:

    y = clamp(((acc + bias) * M + 2^(shift-1)) >>> shift  + zp_out, -128, 127)

This is TFLite's requantisation with a single per-layer multiplier and
round-half-up. A drain request gives a PM result three clocks later.

### Running the PMs together

The PMs run in lockstep. A map entry is taken when every enabled PM can take
it. PMs without a filter (a last batch with fewer than 8 filters) are switched
off: they take nothing and never hold the others up.

## Row sequencing in the scheduler

The row buffer holds one input row. The scheduler's cycle for a row is:

1. When the loader has filled the row buffer, the scheduler copies it word by
   word into the input row buffer of all 8 PMs (`Iw*Ic/16 + 1` clocks).
2. It frees the row buffer, so the loader immediately accepts the next row
   from the stream while the PMs compute.
3. It starts the mapper.
4. The row is finished when three things hold: the mapper is done, both map
   FIFOs are empty, and all PMs are idle.

A store request is served only between rows. A row that is already waiting in
the row buffer goes first, because the host sends STORE right after the last
input row the output row needs.

## The output stream

A store sends output row `h` of the `nfilt` channels in the batch. The
format is:

- pixel-major: `Ow` pixels, each holding `nfilt` int8 values (channel 0 first);
- four bytes per word, little-endian;
- the last word is zero-padded and carries `m_axis_tlast`.

For every pixel, the crossbar issues one drain to all PMs at once. It waits
the three clocks, then serialises the bytes at one per clock. The cost per
pixel is therefore `4 + nfilt` clocks plus one clock per word emitted, when
the consumer never stalls. `tb_output_crossbar` checks this figure exactly.

## Parameters, memory and the layers that fit

| Parameter | Default | From |
|---|---|---|
| `X` (PMs, filters per batch) | 8 | published instance |
| `UF` (MACs per PM) | 16 | published instance |
| `FILTER_WORDS` (16-byte words per PM filter buffer) | 2048 | this design: `Ks*Ks*Ic/16` of the largest evaluated layer (DCGAN, 5x5x1024) is 1600 |
| `ROW_WORDS` (row buffer and PM input row buffer) | 1024 | this design: `Iw*Ic/16` of the largest pix2pix decoder row is 1024 |
| `OUT_ROWS` (output-row ring) | 16 | this design: power of two, at least `Ks` |
| `OW_MAX` (output row width) | 512 | this design |
| `MAP_DEPTH` (CMap/OMap FIFOs) | 16 | this design |

A layer fits when all of the following hold:

- `Ks*Ks*Ic/16 <= 2048`
- `Iw*Ic/16 <= 1024`
- `S*Iw <= 512`
- `Ks <= 16`

`Ic` is rounded up to a multiple of 16 in each case. `Oc` and `Ih` are
unlimited.

Every TCONV layer in the published evaluation fits, assuming stride 2 where
the layer list gives none:

- the DCGAN, FCN, style-transfer and FSRCNN layers;
- the whole synthetic sweep: `Oc` 16–64, `Ks` 3–7, `Ih` 7–11, `Ic` 32–256,
  `S` 1–2.

At these defaults, synthesis of the top reports about 5.4 Mbit of RAM. That
breaks down as:

- per PM: 256 kbit of filter, 128 kbit of input row, and 256 kbit of `out_buf`;
- once: the 128 kbit row buffer.

This is somewhat more than the 4.9 Mbit of block RAM on the Zynq-7020 the
accelerator was published on. The published buffer sizes are not known.
`OW_MAX = 256`, or a smaller `FILTER_WORDS`, brings it under, at the cost of
the widest layers.

## Throughput

Per input row and filter batch, the PMs need `max(Iw*Ks*Ks, P*Ic/16)`
clocks, where `P` is the number of non-cropped products of the row. The first
term is the mapper; the second is the PE array. On top of that come:

- the broadcast, `Iw*Ic/16` clocks;
- the output rows, `Ow*(4+nfilt)` clocks plus one clock per word;
- the stream itself: weights and inputs arrive at one 32-bit word (4 values)
  per clock.

Layers with large `Ic` and few output pixels are bound by loading weights.
Full-size DCGAN_1 (4x4x1024 → 8x8x512, 5x5, S=2) takes 5.74 M clocks in
`tb_mm2im_workloads`, of which 3.3 M are weight words: 28.7 ms at 200 MHz.

The table compares the simulated clocks (at 200 MHz, with a gap-free input
stream) with the per-layer latency published for the FPGA board. That
latency also covers the host driver, the DMA and DRAM, which are not modelled
here, so it is an upper reference rather than a target. Stride 2 is assumed
for all four layers.

| layer | simulated clocks | at 200 MHz | published latency |
|---|---|---|---|
| FCN (1x1x21 → 21, 4x4) | 3,750 | 0.02 ms | 0.22 ms |
| FSRCNN (32x32x32 → 2, 9x9) | 196,707 | 0.98 ms | 5.21 ms |
| DCGAN_4 (32x32x128 → 3, 5x5) | 283,283 | 1.42 ms | 4.67 ms |
| DCGAN_1 (4x4x1024 → 512, 5x5) | 5,741,845 | 28.7 ms | 46.26 ms |

## Where this RTL departs from the published design, or fills gaps

- The row buffer is copied into each PM's input row buffer word by word,
  rather than through per-PM FIFOs.
- The scheduler serialises input rows: a new row is broadcast only when the
  PMs are idle. There is no double buffering inside the PM.
- The block diagram of a PM shows a compute-map buffer in the compute unit
  and an output-map buffer in the accumulation unit. Here one pair of map
  FIFOs feeds all eight PMs in lockstep, and each output-map entry travels
  with its partial sum through the FIFO between the two units.
- The output map is `(oh, ow)`, not a linear index, and `out_buf` is a ring of
  output rows.
- The mapper order follows the worked example (row-major), not the swapped
  indices of the pseudo-code.
- There are single input and output streams, and the operand layouts,
  configuration words and output packing are all this implementation's own.
- STORE blocks the instruction stream until the row is out.
- Requantisation uses one multiplier per layer and rounds half up. Per-channel
  multipliers are not supported.
- `Ic` must be a multiple of 16; the host pads.
- `Oh = S*Ih` and `Ow = S*Iw` with top/left padding `(Ks-S)/2` are computed
  by the host. The RTL takes Oh, Ow and the paddings as given. This matches
  TFLite's SAME padding, which is what the testbenches use.
- The host, the TFLite delegate and the DMA engine are not part of the RTL.
  The testbenches play the host.

## Verification

Each block has a self-checking testbench in `tb/`. Each compares the block
against values it computes on its own, checks the timing the block promises,
and has a watchdog. The block testbenches override parameters to small sizes
where that makes the run shorter.

| Testbench | What it establishes |
|---|---|
| `tb_sdp_ram`, `tb_sync_fifo` | memory and FIFO behaviour against models, including read-before-write, full/empty and simultaneous push/pop |
| `tb_mm2im_mapper` | cmap/omap entries against a direct enumeration for many shapes (the worked example included), cropped taps dropped, `Ks*Ks` clocks per row, back-pressure |
| `tb_compute_unit` | dot products with zero point, `Ic/16` clocks per entry |
| `tb_accumulation_unit` | accumulation, forwarding on back-to-back hits, drain-and-clear, clear after reset |
| `tb_ppu` | requantisation against a 64-bit reference, saturation both ways |
| `tb_processing_module`, `tb_pm_array` | a whole input row through one and through eight PMs, PMs switched off |
| `tb_instruction_decoder`, `tb_weight_data_loader`, `tb_dynamic_input_loader`, `tb_bias_buffer` | stream routing, operand unpacking, one word per clock, row-buffer back-pressure |
| `tb_scheduler` | broadcast order and timing, mapper start arguments, no overlap of row and store work, a store never overtaking a waiting row |
| `tb_output_crossbar` | drain order, byte packing, padding, `tlast`, words held while stalled, cycle count per row |
| `tb_mm2im_top` | the whole design at its default parameters. Six layer shapes: odd and even kernels, strides 1 and 2, a non-square input, 48 channels, a last batch of fewer than 8 filters, random stream gaps and stalls. Every output word is checked against a gather-form transposed convolution, which does not share the mapper's scatter arithmetic. The testbench also counts how often cropped taps were skipped, overlapping sums were accumulated, PMs were switched off, the row buffer held off the stream, the output stalled, and more than one batch ran. It fails if any of these never happened. |
| `tb_mm2im_workloads` | evaluated model layers through the whole design at default parameters: FCN, FSRCNN, DCGAN_4 and DCGAN_1 at full size, StyleTransfer_1 reduced to a 16x16 input and 16 filters, and three corner points of the synthetic sweep. It reports cycles per layer. |

The larger style-transfer layers (64x64 to 256x256 inputs) are not simulated.
They differ from the simulated ones only in size.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert rtl/mm2im_pkg.sv tb/tb_mm2im_top.sv -y rtl \
          --top-module tb_mm2im_top -o sim
./obj_dir/sim
```

Replace the testbench name to run any other. Every testbench ends with a
line `TB_RESULT checks=N failures=M`. The top-level and workload runs take
well under a minute.

## Changing the design

- `X` and `UF` scale the array. `UF` must be a multiple of 4, so that one
  stream word packs into a buffer word.
- The four buffer sizes are independent parameters of `mm2im_top`; the fit
  rules above change with them. `OUT_ROWS` and `OW_MAX` must be powers of two.
- A different post-processing step (for example per-channel multipliers)
  belongs in `ppu`, with its parameters added to `cfg_t` and to the
  configuration block.
