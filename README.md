# XNORBIN — a binary CNN accelerator in SystemVerilog

In a binary convolutional network, both the feature maps and the weights take only the
values +1 and −1. Store +1 as bit 1 and −1 as bit 0. A multiplication then becomes an XNOR
and a sum of products becomes a popcount: `sum = 2·popcount(~(a ^ w)) − n`. Multipliers no
longer limit such a network. What limits it is how often every bit is fetched from
memory. This accelerator is built around reuse:

* **16 maps per word.** Feature maps are packed 16 per 16-bit word, so one word holds one
  pixel position of 16 maps.
* **Two-level window reuse.** A 7 × 7 array of XNOR-popcount units reads each input word
  once per output row. Horizontally, one new column enters the shift registers per cycle.
  Vertically, the K−1 rows already held in a ring of row banks are reused. A rotating
  crossbar moves the window down one row without copying any data.
* **Partial sums stay in memory.** The sums over slices of 16 input maps are accumulated
  next to the memory that holds them: a small compute unit reads, adds and writes back.
  The same unit applies the activation and batch normalisation as a single threshold
  compare.
* **No copy between layers.** Two image memories swap the source and sink roles from one
  layer to the next.

The design is built for kernels up to 7 × 7 and rows up to 256 pixels. It produces one
2D convolution output (16 input maps × K × K taps) per clock in steady state.

## Data format

| Quantity | Width | Meaning |
|---|---|---|
| feature-map / weight word | 16 bit | bit *m* = map *m* of a 16-map slice; 1 = +1, 0 = −1 |
| `xnor_sum` result | 6 bit signed | dot product of two words, −16 … +16 |
| BPU row sum | 8 bit signed | one kernel row, up to 7 taps, −112 … +112 |
| cluster output / partial sum | 16 bit signed | K × K window over one slice, summed over slices in memory |
| threshold | 16 bit signed | output bit = (partial sum ≥ threshold) |
| memory line | 32 bit | two 16-bit words; the image memories have a write enable per half |

All layouts count addresses in 16-bit half-words, except partial sums, which are given in
32-bit lines.

## Datapath

### xnor_sum, CSR and BPU

`xnor_sum` computes `2·popcount(~(img ^ wgt)) − 16` for one word pair.

A `csr` (controlled shift register) holds 7 words. Each shift moves a new word into slot
0, so slot *j* holds the word from *j* shifts ago. All slots can be read in parallel.

A `bpu` has two CSRs: one for image words and one for weights. It applies 7 `xnor_sum`
units to the slot pairs and adds the first K results into an 8-bit row sum. Weights are
shifted in kx = 0 … K−1, so after K shifts slot *j* holds w[K−1−j]. The image slot *j*
holds column c−j, so the sum is the 1D correlation ending at the newest column. Units with
index ≥ K are masked, which lets one array serve every kernel size from 1 to 7.

### BPU cluster

`bpu_cluster` holds 7 BPUs. BPU *i* handles kernel row *i* and adds the row sums of BPUs
0 … K−1 into a 16-bit result. It is pipelined with a register after the CSR shift, one
after the row sum and one after the cluster add. The result therefore appears three
clocks after the shift that completes its window, at one result per clock.

A tag (valid and output column) enters with the shift and travels alongside the data. The
DMA therefore never has to count latencies: it accumulates whatever the cluster marks as
valid.

### Row banks and the rotating crossbar

Seven `row_bank`s of 256 × 16 bit (two-port, synchronous read) form a ring. Input row *y*
always goes to bank *y mod 7*. For output row *r*, BPU *i* needs input row *r + i*, and
that row lives in bank (*i + r*) mod 7. The `crossbar` therefore connects BPU *i* to bank
(*i + rot*) mod 7, where rot = *r* mod 7.

Moving to the next output row loads one new input row, overwriting the oldest, and
advances `rot`. The other K−1 rows stay where they are. The crossbar also steers each
weight word to the weight CSR of the BPU named in the weight stream.

During a sweep, all banks read column *c* together. One clock later the words shift into
the image CSRs. From c = K−1 onwards, each shift completes the window of output column
c − K + 1.

## Memories

| Block | Size | Ports | Use |
|---|---|---|---|
| `main_memory`, Mem1 | 4096 × 32 (128 kbit) | single-port, per-half write enable | source or sink of a layer |
| `main_memory`, Mem2 | 8192 × 32 (256 kbit) | same | the other role |
| `param_buffer` | 512 × 32 (16 kbit) | one write port (IO), one read port | weights, thresholds, layer descriptors |
| `row_bank` × 7 | 256 × 16 | one write, one read | input rows of the current slice |

`main_memory` holds both memories, built from the single-port helper `sram_sp`.

`mem_interconnect` connects the three users to the two memories:

* the DMA's read-only source port;
* the DMA's read/write sink port;
* the IO port.

The `role` bit swaps source and sink. An assertion checks that the IO port is used only
while the core is idle.

The parameter-buffer read port is shared by the DMA (weights, thresholds) and the
scheduler (descriptors). They never read at the same time, and an assertion in the top
level checks this.

## Layer descriptor

The parameter buffer holds one descriptor per layer, 8 lines apart, starting at the line
given with the start command. Six of the lines are used.

| Line | Bits | Field |
|---|---|---|
| 0 | [15:0] W, [31:16] H | input width and height |
| 1 | [3:0] K, [4] pool, [5] last, [31:16] NS | kernel size, 2 × 2 pooling, last layer, number of 16-map input slices |
| 2 | [15:0] NOG, [31:16] WGT | number of 16-map output groups; weight base (half-word index) |
| 3 | [15:0] THR, [31:16] IN | threshold base; input base in the source memory |
| 4 | [15:0] OUT, [31:16] PSUM | binary output base, partial-sum base (line) in the sink memory |
| 5 | [15:0] POOL | pooled output base in the sink memory |

Convolutions use stride 1 and no padding, so OW = W − K + 1 and OH = H − K + 1. The memory
layout is:

* input (x, y) of slice *s*: `IN + (s·H + y)·W + x`;
* partial sum of map *l* of the current group, row *r*, column *c*: line
  `PSUM + (l·OH + r)·⌈OW/2⌉ + c/2`, half *c mod 2*;
* binary output, 16 maps per word: `OUT + (og·OH + r)·OW + c`. When the layer pools, *og*
  is taken as 0, so this area only stages one group before pooling;
* pooled output: `POOL + (og·⌊OH/2⌋ + pr)·⌊OW/2⌋ + pc`;
* weight (map *m*, slice *s*, ky, kx): `WGT + ((m·NS + s)·K + ky)·K + kx`;
* threshold of map *m*: `THR + m`.

A layer's output must sit where the next layer expects its input, which is in the other
memory. After the last layer, `io_done` rises.

## Schedule (scheduler)

The `scheduler` reads a descriptor and runs this loop nest:

```
for og  in 0 .. NOG-1                 output group of 16 maps
  for s in 0 .. NS-1                  input slice of 16 maps
    for r in 0 .. OH-1                output row
      load rows: r = 0 -> rows 0..K-1, else row r+K-1        (DMA, W words each)
      for l in 0 .. 15                output map within the group
        load K*K weights of map og*16+l, slice s             (DMA)
        sweep columns 0 .. W-1; cluster results accumulate   (one per clock)
        drain 5 clocks
  binarize group og (16 maps -> 1 word per pixel)
  pool group og if the layer pools
toggle role; next descriptor, or finish
```

The input rows are loaded once per (og, s, r), and each row is then swept for 16 output
maps. The loop order and the binarization after every 16 output maps follow the
published schedule.

The published schedule overlaps loading, computing and binarizing. Here the phases run
one after another. A sweep of a W-pixel row for one output map costs about W + K·K + 8
clocks, not W.

## DMA and the near-memory compute unit

The `dma` executes one command at a time for the scheduler:

* `LOAD_ROW`
* `LOAD_WGT`
* `BINARIZE`
* `POOL`

In parallel, it accumulates every valid cluster result.

This is the hardest part. Two neighbouring output columns share one 32-bit line of the
single-port sink memory, and the cluster produces one result per clock. The accumulator
waits for the odd column of a pair. It then reads the line, and in the next cycle writes
back both halves, old + new (`compute_unit`). The memory therefore sees one read and one
write per two results and keeps pace.

If a row has odd width, its last even column has no partner. It is held in a one-cycle
tail register, then read, added and written with only its half enabled. For the first
slice (`first`), the old value is ignored, so the partial-sum area needs no clearing.

Commands and accumulation must never use the sink port at the same time. The scheduler's
drain guarantees this, and an assertion in the DMA checks it.

`BINARIZE` first loads the 16 thresholds of the group. Then, for every output pixel, it
reads the 16 partial sums, compares each with its threshold (activation and batch
normalisation folded into one value), packs the 16 bits and writes one word.

`POOL` reads 2 × 2 words and writes their OR. On bipolar bits this OR is the maximum.

## Pin interface (io_ctrl)

The interface has 18 input pins (`io_din[15:0]`, `io_valid`, `io_cmd`) and 6 output pins
(`io_dout[3:0]`, `io_dvalid`, `io_done`). A word sent with `io_cmd = 1` is a header:

| Header bits | Action |
|---|---|
| [15:14] = 0 / 1 / 2 | write Mem1 / Mem2 / parameter buffer from line [13:0]; data words follow in pairs, low half first, one line per pair |
| [15:14] = 3, [13] = 0 | start, with the descriptor list at parameter line [8:0] |
| [15:14] = 3, [13] = 1 | read back Mem1 ([12] = 0) or Mem2 ([12] = 1); two data words follow: the first line and the line count |

Read-back streams each line as 8 nibbles on `io_dout`, least significant first, marked by
`io_dvalid`.

## Departures from the published design

* **Phases do not overlap.** Row loads, weight loads, sweeps and binarization run one after
  another. The published schedule overlaps them, so this design needs more cycles per layer.
  For binary AlexNet layer 2, it needs about 2.8 M cycles against about 2.1 M.
* **Valid convolutions only:** stride 1, no zero padding.
* **Pooling is 2 × 2, stride 2.** The window size is not given.
* **No external flash.** The parameter buffer is filled through the pins. Layers whose
  weights exceed 16 kbit cannot run without a refill mechanism, and none is built. This
  excludes every full-size binary AlexNet layer.
* **One clock** for core and IO. There are no pads, no clock generation and no SRAM macros.
  The memories are plain arrays.
* **CSR depth.** The CSR depth is 7, matching the 7 BPU inputs. A block-diagram label
  mentions 11 rows.
* **Memory size.** The memories total 384 kbit (128 + 256), as published for the two
  blocks. Elsewhere, about 250 kbit is quoted as the largest input and output pair that
  fits.
* **Own choices.** The memory layouts, the descriptor format, the pin protocol and the
  command handshakes are this design's own.

## Files

Everything shared (constants, types, the descriptor struct, the DMA command enum and a
reference `bipolar_dot` function) is in `rtl/xnorbin_pkg.sv`. Every other file holds one
module. The hierarchy is:

```
xnorbin
├── io_ctrl
├── mem_interconnect ── main_memory ── sram_sp (×2)
├── param_buffer
├── scheduler
├── dma ── compute_unit
├── row_bank (×7)
├── crossbar
└── bpu_cluster ── bpu (×7) ── csr (×2), xnor_sum (×7)
```

## Simulation

Every block has a self-checking testbench `tb/tb_<block>.sv`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog if it hangs. With
Verilator 5, list the package first:

```
verilator --binary --timing -Wno-fatal --top-module tb_xnorbin \
    rtl/xnorbin_pkg.sv $(ls rtl/*.sv | grep -v _pkg) tb/tb_xnorbin.sv
./obj_dir/Vtb_xnorbin
```

| Testbench | What it checks |
|---|---|
| `tb_xnor_sum`, `tb_csr`, `tb_bpu` | against `bipolar_dot` and software windows, all kernel sizes |
| `tb_bpu_cluster` | 2D window sums, latency 3, one output per clock |
| `tb_row_bank`, `tb_param_buffer`, `tb_main_memory` | random writes and reads against models; half-word enables |
| `tb_crossbar` | rotation for every `rot`, weight steering |
| `tb_mem_interconnect` | role swap, IO access, read-data steering |
| `tb_compute_unit` | pair accumulation, first-slice bypass, threshold compare |
| `tb_dma` | every command, plus accumulation of two slices with odd width |
| `tb_scheduler` | complete loop nest against a DMA model, command order and sweep tags |
| `tb_io_ctrl` | writes to all three targets, start/done, nibble read-back |
| `tb_xnorbin` | end to end through the pins: three chained layers (pooling, several slices and groups, a kernel-row wrap in the bank ring, odd widths), compared with a software network; counts every mechanism |
| `tb_xnorbin_kernels` | end to end with kernel sizes 7, 1 and 2 |

The top has no parameters, so the end-to-end testbenches run the full-size design.
