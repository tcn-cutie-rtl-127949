# TCN-CUTIE ternary accelerator RTL

TCN-CUTIE is a fully unrolled accelerator for ternary neural networks, where
weights and activations are limited to -1, 0 and +1. It has one output channel
compute unit (OCU) for each of the 96 output channels. Every clock cycle, each
OCU takes one complete 3x3x96 activation window, multiplies it by its kernel,
sums the products, pools the sum and turns it back into a ternary value. A
small shift-register memory keeps the last 24 feature vectors of a sequence.
With it, the same datapath also runs dilated 1D convolutions, the layers of a
temporal convolutional network (TCN). It does this by mapping each 1D layer
onto a 2D convolution.

The top module is `tcn_cutie` (`rtl/tcn_cutie.sv`). Its default parameters
give the full-size design:

| Parameter | Default | Meaning |
|---|---|---|
| `NC` | 96 | channels = number of OCUs |
| `FM` | 64 | largest feature map side |
| `TS` | 24 | TCN memory entries |
| `WD` | 64 | weight words per OCU |
| `NL` | 16 | layer descriptors |

The first three values come from the published design. `WD` and `NL` are
this design's own choices.

## Data encoding

- **Trits.** Each trit is stored as two bits `{sign, nonzero}`:
  - `00` = 0
  - `01` = +1
  - `11` = -1
  - `10` is read as 0
- **Pixels.** A pixel of 96 channels is therefore 192 bits wide.
- **Compression.** In memory, five trits are packed into one byte as a
  base-3 number (digit 0/1/2 for trit 0/+1/-1). A compressed pixel is
  20 bytes = 160 bits.
- **Width conversion.** `trit_compressor` converts 192 bits to 160 bits and
  `trit_decompressor` converts 160 bits back to 192. Both are combinational.
- **Column reads.** A pixel column of three rows is 480 bits compressed.

## Activation memory (`activation_memory`)

- **Contents.** It holds compressed feature maps of up to 64x64 pixels.
- **Two halves.** A layer reads its input from one half and writes its
  output to the other.
- **Banking.** Rows are spread over three banks by row mod 3. This lets one
  read return the three vertically adjacent pixels of a window column in a
  single cycle.
- **Padding.** Rows outside the map read as zero, which gives the top and
  bottom zero padding.
- **Timing.** Reads are registered. A write stores one pixel, with 32-bit
  lane strobes for the host port.

## TCN memory (`tcn_memory`)

The TCN memory is a shift register of 24 compressed feature vectors.

- **Push.** A push shifts the entries up by one and puts the new vector in
  entry 0.
- **Indexing.** With `seq_len` valid vectors, time step `x[n]` sits in entry
  `seq_len-1-n`.
- **Read.** A 24-to-3 multiplexer returns the steps `base`, `base+D` and
  `base+2D`, where `D` is the layer's dilation. Steps outside `0..seq_len-1`
  read as zero; this is the causal padding.
- **Mapping.** The scheduler wraps the sequence into a 2D map of width `D`
  and height `ceil(L/D)`. Pixel `(r, c)` is `x[r*D+c]`. The pixels directly
  above and below a pixel are then exactly `D` time steps away.
- **Weights.** A 1D kernel of length 3 with dilation `D` becomes a 3x3
  kernel whose middle column holds the 1D kernel. No data has to be
  reordered.

## Line buffer (`linebuffer`)

- **Contents.** The line buffer holds the three most recent decompressed
  pixel columns and presents the full 3x3x96 window (1728 bits) to all OCUs.
- **Shifting.** Each cycle, one new column is shifted in.
- **Left and right padding.** A zero column is shifted in at the left and
  right edges of a row.

## Weight memory and weight buffer (`weight_memory`, `weight_buffer`)

Each OCU has its own weight memory of 64 words of 480 bits.

- **Layer layout.** A layer uses four consecutive words, starting at the
  descriptor's `wbase`:
  - three words for kernel rows 0..2; each word holds columns 0..2 as three
    compressed pixels, with column 0 in the low bits;
  - one threshold word, with `thr_lo` in bits [13:0] and `thr_hi` in
    bits [27:14], both signed.
- **Weight buffer.** At the start of a layer, the weight buffer next to the
  OCU decompresses and stores the kernel and the two thresholds.

## Output channel compute unit (`ocu`)

- **Multiply and sum.**
  - The trit-by-trit product of window and kernel is computed bitwise on the
    2-bit codes.
  - The number of +1 products minus the number of -1 products gives a 14-bit
    signed sum.
  - The sum goes into the unit's single pipeline register.
- **Pooling.** After the register comes optional 2x2 pooling:
  - max pooling, or
  - average pooling, computed as a sum of four (the factor 4 goes into the
    thresholds).
  - Pooling works on the stream of windows in raster order, using one
    held value and a row buffer of 32 entries.
- **Threshold.** The result `v` becomes:
  - +1 if `v >= thr_hi`,
  - -1 if `v < thr_lo`,
  - 0 otherwise.
- **Enable.** `en_i` is a clock enable. Units beyond the layer's output
  channel count are held idle. This models the hierarchical clock gating of
  idle OCUs.

## Scheduler (`cutie_scheduler`)

An inference starts in one of two ways:

- by a write to the CTRL register, or
- by the `ext_trig_i` line, when TRIG_EN is set.

It then runs layers `0..NUM_LAYERS-1`. Each layer goes through three phases:

| Phase | Cycles | Work |
|---|---|---|
| LOADW | 4 | load weight buffers from words `wbase..wbase+3` |
| RUN | `H*(W+2)` | fetch one column per cycle, including two padding columns per row |
| DRAIN | 3 | empty the pipeline |

So a layer on a W x H map takes `4 + H*(W+2) + 3` cycles.

The pipeline, for a column fetched at cycle t:

| Cycle | Step |
|---|---|
| t | memory read |
| t+1 | decompress, shift into the line buffer |
| t+2 | OCU multiply and sum, register |
| t+3 | pooling, threshold, compression, write-back |

Write-back goes to one of two places:

- the activation memory half `out_buf`, at `(r, c)`, or at `(r/2, c/2)` when
  pooling; or
- the TCN memory, as a push, when `dst_tcn` is set. This is how the 2D part
  of a hybrid network appends its feature vector to the sequence.

At the end of the inference, `irq_o` pulses for one cycle and STATUS.done is
set.

## Control port (`cutie_ctrl_regs`, APB)

| Address | Register | Fields |
|---|---|---|
| 0x000 | CTRL (W) | bit 0 start, bit 1 clear TCN memory (both self-clearing) |
| 0x004 | STATUS (R) | bit 0 busy, bit 1 done (cleared by start) |
| 0x008 | NUM_LAYERS | layers per inference |
| 0x00C | TRIG_EN | bit 0 enables `ext_trig_i` |
| 0x100+8l | layer l, word 0 | `in_w[6:0]`, `in_h[13:7]`, `pool[15:14]` (0 none, 1 max, 2 average), `in_buf[16]`, `out_buf[17]`, `src_tcn[18]`, `dst_tcn[19]` |
| 0x104+8l | layer l, word 1 | `n_oc[6:0]`, `wbase[12:7]`, `dilation[17:13]`, `seq_len[22:18]` |

For a TCN-source layer, `in_w` must equal the dilation and `in_h` must equal
`ceil(seq_len/dilation)`.

## Data port (`cutie_data_port`)

The data port is a 32-bit request/grant port with a word address of 20 bits.

- **Timing.** `gnt = req & !busy`. Read data arrives one cycle after the
  grant, with `rvalid`. The host can reach the memories only while the
  accelerator is idle.

Address map (`addr[19:18]` selects the region):

| Region | Contents | Address fields | Access |
|---|---|---|---|
| 0 | activation memory | `[16]` half, `[15:10]` row, `[9:4]` column, `[3:0]` lane 0..4 | read and write |
| 1 | TCN memory | `[3:0]` lane; lanes 0..3 are staged, and a write to lane 4 pushes the vector | write |
| 2 | weight memories | `[17:10]` OCU, `[9:4]` word, `[3:0]` lane 0..14 | write |

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

`tb_tcn_cutie` runs the full-size top with its default parameters. It loads
random weights and inputs for a six-layer hybrid network, runs five frames
and compares every output pixel and every TCN memory entry with a reference
model in the testbench. The network contains:

- 2D convolutions with max and average pooling;
- a layer with few output channels;
- a push into the TCN memory;
- dilated TCN layers.

Along the way it counts these mechanisms, and a mechanism that never occurs
counts as a failure:

- padding columns
- both pooling kinds
- gated OCUs
- causal padding
- pushes from the datapath and from the host
- host stalls while busy
- starts by register and by trigger line
- interrupts

Each module also exists as a copy with one deliberate error, and its
testbench has been run against that copy and detects the error.

## Differences from the published design and limits

- **TCN memory width.** Entries are 160-bit compressed vectors, as drawn in
  the block diagram. The published text gives the memory as 576 bytes, which
  would mean uncompressed 192-bit entries.
- **No raw scores.** Outputs are always ternary. The raw sums of a final
  classifier layer cannot be read, so a class decision must be made from
  thresholded outputs.
- **TCN output shape.** The output of a TCN layer is written in the same 2D
  geometry as its input. A following layer with a different dilation would
  need the data re-wrapped by the host.
- **Buffering.** Weight buffers are single-buffered, so loading weights
  costs 4 cycles per layer.
- **Clock gating.** Modelled with enables; no clock-gate cells.
- **Memories.** Written as arrays, not SRAM or standard-cell memory macros.
- **Convolution shape.** Stride 1 and 3x3 kernels only.
- **Not included.** The SoC around the accelerator:
  - RISC-V cores and cluster
  - L2 memory
  - interconnect and APB bus
  - peripherals
  - clock generation
  - clock domain crossings
  - power gating
  - pads
