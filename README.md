# A systolic array with spatial-tiled output-stationary dataflow for FuSeConv

Depthwise-separable convolutions are cheap in arithmetic but map badly onto
systolic arrays. A depthwise KxK convolution has no reuse of inputs across
filters and no reduction over channels, so after an im2col transformation it
keeps only one column of the array busy. *Fully-separable convolution*
(FuSeConv) factorises the KxK depthwise filter further, into 1xK row filters
and Kx1 column filters. In the *FuSe-Half* variant, half of the channels get
a row filter and the other half get a column filter. Every channel then turns
into a set of independent 1D convolutions, one per image row (or column).
These are followed by the usual 1x1 pointwise convolution.

A 1D convolution fits one row of a systolic array. The *spatial-tiled output
stationary* (ST-OS) dataflow puts one 1D convolution on each array row:

- activations flow along the row, one PE per clock;
- each PE keeps one output in its accumulator;
- each filter tap is sent to all PEs of the row in the same cycle, over one
  extra **weight broadcast link per row**.

The same array still runs as a normal output-stationary (OS) matrix engine for
pointwise layers. Which dataflow runs is chosen for each command.

This repository holds synthesizable SystemVerilog for that accelerator, in
its reference configuration:

- a 16x16 array of 8-bit multiply-accumulate PEs with 32-bit accumulators;
- three 64 KB on-chip buffers: input feature map (IFMAP), weights and output
  feature map (OFMAP);
- a selector that chooses which filter each row's broadcast link carries;
- a controller that runs folds in either dataflow.

It also holds self-checking testbenches, including one that runs the
last bottleneck block of MobileNet-V2, with FuSe-Half, at full size.

```
                 weight buffer (16 banks x 4 KB)          row_wsel
                   | | | |  (columns, OS mode)              |
                   v v v v                                  v
 IFMAP buffer -->  PE PE PE PE  <-- broadcast row 0 <-- weight_broadcast_mux
 (16 banks x 4 KB) PE PE PE PE  <-- broadcast row 1 <--   (bank -> row)
  bank r feeds     PE PE PE PE  <-- ...
  row r            PE PE PE PE  <-- broadcast row 15
                   | | | |  (accumulators drain downward)
                   v v v v
                 OFMAP buffer (16 banks x 1024 x 32 bit)
```

## How one array row computes a 1D convolution

This is the part of the design that needs the most explanation. A row of
COLS = 16 PEs computes 16 consecutive outputs of

    out[j] = sum_{k=0..K-1} in[j+k] * w[k]          j = 0..15

The inputs are the 16+K-1 samples `in[0..16+K-2]`, padding zeros included.

Samples enter at the left PE and move one PE to the right every clock, so PE
j sees the stream j cycles late. The tap, however, reaches every PE of the row
in the same cycle. For PE j to hold `in[j+k]` while the tap is `w[k]`, the
sample index minus the PE index must be the same for all PEs in a given
cycle. A forward stream cannot give this: PE j sees sample `t-j` at time t.
A reversed stream can, and the controller streams both samples and taps
**last first**:

| stream cycle t | sample entering row | tap on broadcast link |
|---|---|---|
| 0 | in[16+K-2] | none (zero) |
| ... | ... | none |
| 15 | in[K-1] | w[K-1] |
| 16 | in[K-2] | w[K-2] |
| ... | ... | ... |
| 16+K-2 | in[0] | w[0] |

A buffer read takes one cycle and the PE registers take one more. So in cycle
t+2, PE j multiplies sample `in[T-1-t+j]` by tap `w[T-1-t]`, where T = 16+K-1.
That is `in[j+k]*w[k]` with `k = T-1-t`. The taps start only when the last
PE has its first useful sample (cycle 15). Before that the link carries
zeros, so nothing is added.

One pass, called a **fold**, costs:

| phase | cycles |
|---|---|
| clear | 1 |
| stream | T = 16+K-1 |
| flush | 2 |
| drain | 16 |

That is 37 cycles for K = 3. The 16 rows work in parallel on 16 different
slices, so one fold yields 256 outputs.

Column filters use exactly the same hardware. The buffer simply holds image
columns instead of image rows.

## Processing element (`rtl/pe.sv`)

Each PE has:

- a horizontal operand register;
- a vertical operand register, loaded through a two-way selector;
- a multiplier, an adder and an accumulator.

The selector is driven by `data_en` and picks the value from the PE above (OS
mode) or the row's broadcast link (ST-OS mode). Both operand registers are
passed on to the right and downward neighbours.

Three controls are the design's own additions:

- `clr` zeroes all three registers at the start of a fold;
- `mac_en` adds the product;
- `drain` loads the accumulator from the PE above.

Drain shifts finished results down the column. The bottom row's accumulators
(`drain_out`) go straight into the OFMAP buffer, one array row per clock,
bottom row first.

## Array, buffers and broadcast selection

`rtl/systolic_array.sv` is the 16x16 grid of PEs. It has one left-edge input
per row, one top-edge input per column and one broadcast input per row.
Control signals reach all PEs at once.

`rtl/scratchpad.sv` is a banked buffer with one bank per array lane. Each bank
has a synchronous read port (one-cycle latency) and a write port, which can be
used in the same cycle. A read of the address being written returns the old
word. It is used three times:

| buffer | banks | depth | width | size |
|---|---|---|---|---|
| IFMAP | 16 | 4096 | 8 bit | 64 KB |
| weight | 16 | 4096 | 8 bit | 64 KB |
| OFMAP | 16 | 1024 | 32 bit | 64 KB |

IFMAP bank r feeds array row r. Weight bank c feeds column c in OS mode.
OFMAP bank c receives column c.

`rtl/weight_broadcast_mux.sv` drives each row's broadcast link with one
weight bank, chosen by `row_wsel[r]`. This one selector covers all three ways
of placing slices on rows:

- **channels-first** (`row_wsel[r] = r`): every row works on a different
  channel with its own filter. This needs one weight read per row per cycle.
- **spatial-first** (all rows select the same bank): the rows hold different
  image rows of one channel and share one filter read. This suits designs with
  little memory bandwidth.
- **hybrid**: groups of rows share a filter. This is how maps smaller than the
  array are packed. For example, two 7-row channels go on rows 0-6 (bank 0)
  and rows 7-13 (bank 1).

## Output-stationary mode for pointwise layers

With `mode = DF_OS`, the controller streams the operands with the usual skew.
Row r reads `A[r][k]` from IFMAP bank r at time r+k. Column c reads
`B[k][c]` from weight bank c at time c+k. PE(r,c) then accumulates
`C[r][c] = sum_k A[r][k] B[k][c]`.

For a 1x1 convolution:

- A is 16 pixels by `len` input channels;
- B is `len` input channels by 16 output channels.

One fold costs 1 + (len+15) + 17 + 16 cycles. Outside their read windows the
array edges are fed zero. This is why mixing dataflows, or running folds back
to back, needs no extra flush.

## Commands (`rtl/fuse_pkg.sv`, `rtl/stos_controller.sv`)

A command (`cmd_t`) is given with `cmd_start` while `busy` is low. `done`
pulses one cycle after the last drain cycle. A command runs `folds` folds. All
folds share the same dataflow and the same `len`: taps K in ST-OS, reduction
depth in OS. After each fold the three base addresses advance by their
strides.

| field | meaning |
|---|---|
| `mode` | `DF_STOS` or `DF_OS` |
| `len` | taps K (ST-OS) or reduction depth (OS), at least 1 |
| `folds` | number of folds, at least 1 |
| `ibase`, `istride` | fold f reads IFMAP bank r from `ibase + f*istride` |
| `wbase`, `wstride` | fold f reads weights from `wbase + f*wstride` |
| `obase`, `ostride` | result of array row r, column c goes to OFMAP bank c, address `obase + f*ostride + r` |

Data layout expected in the buffers:

- **ST-OS**: IFMAP bank r holds row r's slice in natural order, 16+K-1
  samples with the padding zeros stored explicitly. The weight bank chosen by
  `row_wsel[r]` holds taps `w[0..K-1]`.
- **OS**: IFMAP bank r holds `A[r][0..len-1]`. Weight bank c holds
  `B[0..len-1][c]`.

Two assertions in the controller catch misuse: a start while busy, and a
command with zero length or zero folds.

## Top level and host ports (`rtl/fuse_accel.sv`)

The top connects the controller, the three buffers, the broadcast selector
and the array. An outside agent, for example a DMA engine in front of DRAM,
fills and empties the buffers through plain ports:

- `if_wr_*` and `wt_wr_*` each write one byte per cycle into a chosen bank
  and address;
- `of_rd_*` reads one 32-bit accumulator, returned on `of_rd_data` the next
  cycle.

The OFMAP holds raw 32-bit sums. The host requantises them to 8 bits before
they become the input of the next layer; the end-to-end test does this with a
shift and saturate.

## Parameters

| parameter | default | where |
|---|---|---|
| `ROWS`, `COLS` | 16 | array size, reference configuration |
| `DATA_W` | 8 | operand width (own choice) |
| `ACC_W` | 32 | accumulator width (own choice) |
| `IF_DEPTH`, `WT_DEPTH` | 4096 | 64 KB / (16 banks x 1 byte) |
| `OF_DEPTH` | 1024 | 64 KB / (16 banks x 4 bytes) |

The depths are derived from `fuse_pkg::BUF_BYTES`, so changing `ROWS`/`COLS`
keeps every buffer at 64 KB.

## What it can run

The design at its defaults cannot hold any whole evaluated network on chip.
For example, MobileNet-V2 FuSe-Half has 3.46 M weights against a 64 KB weight
buffer. Networks run layer by layer, with the buffers refilled between
commands, the same way as in the original latency study, which also assumes
64 KB SRAMs backed by DRAM.

The last MobileNet-V2 bottleneck, with its depthwise convolution replaced by
FuSe-Half, shows how a block is run. Its input is 7x7x160. It expands to 960
channels with a 1x1 convolution, applies 1x3 and 3x1 filters to 480 channels
each, and projects to 320 channels with a second 1x1 convolution.

- Every activation tensor fits the IFMAP buffer: at most 7x7x960 = 47 KB.
- The FuSe filters fit too: 2.9 KB.
- The pointwise weights do not fit: 150 KB and 300 KB. They are loaded in
  3 and 5 fills, each holding floor(4096/Cin) groups of 16 output channels.
- Each FuSe slice needs 9 padded samples, within the 18-sample window. It
  gives 7 outputs on 16 columns, so only 7 of the 16 columns do useful work.
  That is the low use of the array expected for small maps.

Array cycles per step, excluding buffer fill and read-out:

| step | dataflow | folds | cycles |
|---|---|---|---|
| expansion 1x1, 160 -> 960 | OS | 240 | 50,220 |
| FuSe-Half 1x3 / 3x1, 960 channels | ST-OS | 480 | 17,768 |
| projection 1x1, 960 -> 320 | OS | 80 | 80,740 |
| whole block | | | 148,728 (149 us at 1 GHz) |

With FuSe, the 1D filter step is the smallest share of the time. The
pointwise layers dominate. `tb/tb_workload_mbv2_block.sv` runs the whole
block and checks every intermediate result.

Kernel sizes 3, 5 and 7 all fit one ST-OS pass. Maps wider than 16 are cut
into tiles of 16 outputs; each tile streams its own 16+K-1 samples, so the
K-1 samples at a tile border are loaded twice. `tb/tb_workload_fuse_wide.sv`
runs four such layers, with tiles packed 16 to a fold and row r always
taking its filter from weight bank r. The last one is the *FuSe-Full*
variant, in which every channel gets both a row and a column filter. The
hardware runs it like FuSe-Half, with twice as many slices:

| layer | K | tiles per line | folds | array cycles |
|---|---|---|---|---|
| 56x56x144 | 3 | 4 | 2,016 | 74,624 |
| 28x28x120 | 5 | 2 | 420 | 16,387 |
| 14x14x480 | 7 | 1 | 420 | 17,227 |
| 28x28x120, FuSe-Full | 5 | 2 | 840 | 32,774 |

The layer shapes are those of typical MobileNet-V2 and V3 stages, not
figures from the published evaluation. With K = 7, the fold is 1 + 22 + 2 +
16 = 41 cycles for 16x16 outputs, against 37 cycles with K = 3.

The array sizes of the overhead study (8x8, 32x32 and 64x64) are a change of
`ROWS` and `COLS`. The buffers stay at 64 KB each; only their bank count and
depth follow the array size. `tb/tb_array_sizes.sv` builds all three and runs
one ST-OS and one OS command on each.

## Verification

Every testbench checks itself and ends with a line
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_pe` | PE against a cycle-level reference under random control; operand and result latency |
| `tb_systolic_array` | OS matrix product with skewed feeds, and ST-OS 1D convolutions on all 16 rows; `mac_en` stops exactly at the last useful cycle, so the latency is checked too |
| `tb_weight_broadcast_mux` | channels-first, spatial-first, hybrid and random row selection |
| `tb_scratchpad` | random writes and parallel reads on a full 64 KB buffer; read-during-write |
| `tb_stos_controller` | the cycle-by-cycle read addresses and enables, valid flags, drain addresses, stride advance, done pulse and cycle count per fold in both modes |
| `tb_fuse_accel` | the full design at default size running one complete FuSe-Half layer (see below) |
| `tb_workload_mbv2_block` | the full-size last MobileNet-V2 bottleneck with FuSe-Half: expansion, FuSe filters and projection; all 109,760 results and every cycle count |
| `tb_workload_fuse_wide` | full-size FuSe-Half layers with K = 3, 5 and 7 and one FuSe-Full layer on maps split into 16-wide tiles; every array output and cycle count; fails if no halo tile or partly used tile ran |
| `tb_array_sizes` | 8x8, 32x32 and 64x64 builds of the whole design (through the helper `tb/size_check.sv`): one two-fold ST-OS command and one OS command each, results and cycle counts |

The `tb_fuse_accel` layer is 8x8x4, K = 3, padding 1, 16 output channels. It
runs in four steps:

1. row filters (ST-OS, hybrid sharing);
2. column filters (ST-OS);
3. host requantisation and reordering;
4. pointwise (OS, 4 folds).

It compares every result with a direct computation. It also counts the
mechanisms it exercised: ST-OS and OS commands, a dataflow switch, a
multi-fold command, shared and distinct broadcast filters. It fails if any of
them never happened.

To run a test with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl rtl/fuse_pkg.sv rtl/*.sv \
        tb/tb_fuse_accel.sv --top-module tb_fuse_accel -Mdir obj -o sim
    ./obj/sim

Each test runs in a few seconds once built. `tb_array_sizes` also needs
`tb/size_check.sv` on the command line.

## Departures from the published description, and open points

- **Edge assignment.** The published text says the standard dataflow moves
  activations from top to bottom. Its ST-OS mapping figure, however, shows
  input slices entering each row from the left, with weights broadcast. This
  design follows the mapping figure. The IFMAP buffer feeds the rows in both
  modes and the weight buffer feeds the columns. The OS product is the same
  up to a transpose.
- **Where results leave.** The mapping figure draws each row's outputs at its
  right end. The architecture figure draws an output buffer under the bottom
  row. Results here drain down the columns into that bottom buffer.
- **Weight-stationary mode is not built.** The text mentions output- or
  weight-stationary operation for other layers, but the system configuration
  lists only OS and ST-OS.
- **The PE's extra input.** The published PE drawing has one more vertical
  input into the adder, whose use is not explained. It is not built.
- **Design-specific choices.** The following are all this design's own
  choices; the published description does not specify them:
  - the number format (8-bit operands, 32-bit accumulators);
  - the banking and port set of the buffers;
  - the command format and the last-first stream order;
  - the clear/flush/drain phases;
  - the host ports.
- **Stride 1 only.** The published description does not discuss strided
  layers. The address generator steps by one sample per cycle, so a stride-2
  layer runs at stride 1 and the host keeps every second output (or feeds
  pre-subsampled slices for the 1D filters).
- **Time per useful multiply.** In a fold each PE multiplies during only K
  of its 1 + 16 + K-1 + 2 + 16 cycles (3 of 37 for K = 3). The rest is the
  sample stream filling the row and the drain. The published utilisation
  figures for FuSe layers (56-100 % on a 16x16 array) come from a
  cycle-level simulator whose exact measure is not given, so they have not
  been compared with this design.
- **Drain does not overlap compute.** 16 of the 37 cycles of a K = 3 ST-OS
  fold are drain. Overlapping drain with the next fold's streaming would hide
  them, but that is not done here.
- **Not evaluated.** The published 1 GHz clock and the area and power overhead
  of the broadcast links (3.2 % area and 6.7 % power at 16x16) have not been
  checked. No timing or power analysis has been done.
- **Outside this design.** The DRAM and the engine that moves data between it
  and the buffers are not part of this design. Neither is the training method
  (operator scaffolding with adapter matrices): after training, the adapters
  are folded into ordinary FuSe filters, so the hardware never sees them.
