# WS-Mono3D: a weight-stationary systolic array with its memories stacked on top

This is synthesizable SystemVerilog for the accelerator described in *A New Dataflow
Implementation to Improve Energy Efficiency of Monolithic 3D Systolic Arrays* (Shukla,
Pavlidis, Salman, Coskun): a 256 x 256 array of 8-bit integer MAC units running the
weight-stationary (WS) dataflow, with a 2 MB IFMAP SRAM, a 2 MB OFMAP SRAM and a 32 MB
filter RRAM stacked above it in a six-tier monolithic 3D chip.

## The idea

In a planar WS systolic array each *fold* (one tile of weights resident in the array)
costs three phases:

1. **weight preload**: weights enter at the top edge and are shifted down one row per
   cycle, so loading a 256-row tile takes about 256 cycles;
2. **input forwarding**: IFMAP bytes enter at the left edge and are shifted right one
   column per cycle, so the last column starts working about 256 cycles after the first;
3. **compute and drain**: the psums flow down the columns and leave at the bottom edge.

Monolithic 3D integration puts the memories a few hundred nanometres above the array,
connected by monolithic inter-tier vias (MIVs) that are cheap enough to give every bit of
every bank port its own via. The design uses that bandwidth to remove the first two
phases:

* **Parallel weight preload.** The filter RRAM has 256 banks (4 tiers x 64) with
  256-byte words. One read at the same address in all banks returns 256 x 256 bytes, a
  whole weight tile, and every PE latches its weight in the same cycle. Preload takes one
  cycle per fold.
* **IFMAP multicast.** The IFMAP SRAM's 16 banks of 16-byte words deliver 256 bytes per
  cycle, one per array row, and each byte is driven to all 256 PEs of its row at once.
  No PE-to-PE input forwarding is needed.

Psums still move down the columns one row per cycle, so each column performs its
multiply-accumulates in the same order as in the planar WS array and gives bit-identical
results. Per fold the cycle count drops from `w + I + O` to `1 + 1 + O`.

## Blocks and tiers

| tier | block | module | size (default) |
|------|-------|--------|----------------|
| T0 | PE array | `ws_pe_array` of `ws_pe` | 256 x 256 signed 8-bit MACs, 24-bit psums |
| T0 | row skew at the array's input edge | `ifmap_skew` | row r delayed r cycles |
| T0 | output requantisation at the bottom edge | `ofmap_requant` | shift + saturate to int8 |
| T0 | fold sequencer | `ws_controller` | |
| T1 | IFMAP buffer | `sram_banked` | 16 banks x 8192 words x 16 B = 2 MB |
| T1 | OFMAP buffer | `sram_banked` | 16 banks x 8192 words x 16 B = 2 MB |
| T2-T5 | filter weights | `filter_rram` | 4 tiers x 64 banks x 512 words x 256 B = 32 MB |
| | one memory bank (1 read + 1 write port) | `mem_1r1w` | |
| | whole accelerator | `ws_mono3d_top` | |

Shared constants and types (the fold state enum, the output tag) are in the package
`ws_mono3d_pkg`. The MIVs have no logic of their own: they are the full-width buses
between the memory instances and the array in `ws_mono3d_top`. The heat spreader,
bulk silicon, BEOL and inter-layer dielectric of the stack are physical layers and do not
appear in the RTL.

## A fold, cycle by cycle

This is the part that is easiest to get wrong, so it is spelled out here. Let a fold have
N IFMAP vectors (output pixels) and let R = 256 be the number of rows. Cycle numbers are
relative to the cycle `A` in which the controller accepts the fold's command.

| cycle | what happens |
|-------|--------------|
| A | command accepted; all RRAM banks read the tile's word address (fetch) |
| A+1 | **preload**: every PE latches its weight from the RRAM output; IFMAP vector 0 is read |
| A+1+k | IFMAP vector k is read from all 16 SRAM banks (k = 0 .. N-1) |
| A+2+k | vector k's byte for row 0 is multicast to row 0; row 0 adds its products |
| A+2+k+r | row r sees the same vector (the skew) and adds its product to the psum from row r-1 |
| A+R+1+k | the bottom row (r = R-1) adds its product: vector k's dot products are complete in all 256 columns |
| A+R+2+k | requantised bytes written at one address into all 16 OFMAP banks |
| A+N+R | last drain cycle: the next command can be accepted and its tile fetched |
| A+N+R+1 | next fold's preload (if a command was waiting); last OFMAP write of this fold |

So consecutive folds start every **N + R** cycles, and a fold that starts from idle adds
one fetch cycle. Written as the paper's per-fold sum, a fold is one preload cycle, one
cycle for the first vector to reach every PE of row 0, and `O = N + R - 2` further
cycles until the bottom row holds the last result (its write overlaps the next
preload). A planar WS array at the same size would add about R cycles of weight shifting
and about R cycles of input forwarding to every fold.

Two details make this work:

* **Row skew.** Because psums still travel downward, row r must see vector k exactly r
  cycles after row 0. The SRAM delivers the whole vector in one cycle, so `ifmap_skew`
  delays row r by r register stages (a triangle of R(R-1)/2 bytes). Columns need no skew:
  with multicast all columns of a row work on the same vector in the same cycle, so all
  256 outputs of a vector reach the bottom edge together and are written as one 256-byte
  OFMAP word.
* **No weight double-buffering.** A tile is replaced all at once, so the previous fold must
  have drained completely before the next preload. The controller therefore waits R
  cycles after the last IFMAP read. To hide the RRAM read latency it fetches the next
  tile in the last drain cycle; the RRAM bank outputs hold the word until the preload
  cycle.

Each IFMAP read pushes a `{valid, first}` tag into an R+1-stage pipe in the controller
that mirrors the array latency; the tag leaving the pipe is the OFMAP write strobe, and
`first` reloads the OFMAP address counter with the fold's base address.

## Data layout

* **Filter RRAM.** Bank k (tier k/64, bank k mod 64) holds row k of every tile; byte c of
  a 256-byte word is the weight of column c. Word address t in all banks is tile t, so the
  RRAM holds 512 tiles. A tile's row r is element r of the reduction (for a convolution,
  one `(input channel, filter row, filter column)` position); column c is one output
  channel. Unused rows and columns are written as zero weights.
* **IFMAP SRAM.** Word address v in all 16 banks is IFMAP vector v; byte j of bank b is the
  input of array row 16b + j. The vectors are stored pre-arranged (im2col): the hardware
  reads consecutive word addresses and does no address arithmetic of its own.
* **OFMAP SRAM.** Word address v in all 16 banks is the output of vector v; byte j of bank b
  is output channel 16b + j of that tile.

All values are signed 8-bit two's complement. The 24-bit column sums are converted to
bytes by `ofmap_requant`: arithmetic right shift by the fold's `shift`, then saturation to
[-128, 127].

## Interfaces of `ws_mono3d_top`

* **Fold command** (valid/ready): `cmd_rram_addr` (tile), `cmd_ifmap_base`,
  `cmd_n_pixels` (N >= 1, at most 8192), `cmd_ofmap_base`, `cmd_shift`. `cmd_ready` is
  high when idle and in a fold's last drain cycle; a command presented early waits, and
  must stay stable while it waits (asserted in `ws_controller`). `busy` stays high until
  the fold's last OFMAP write; `fold_state` shows idle (0), preload (1), stream (2) and
  drain (3).
* **Host ports**, standing in for the off-chip DRAM side, which is not part of this RTL:
  IFMAP write (`if_host_*`, one 16-byte bank word per cycle), OFMAP read (`of_host_*`, data
  one cycle after `of_host_re`) and RRAM write (`rr_host_*`, one 256-byte bank word per
  cycle). Because every bank has separate read and write ports, the host can fill IFMAP
  words for a later fold and read finished OFMAP words while a fold runs, which is how
  off-chip transfers overlap with computation (the paper's performance model assumes
  double-buffered on-chip memories). The host must not write IFMAP words that a running
  fold still reads, and weights are meant to be written once, before inference (RRAM
  write endurance).
* Reset is synchronous and active low. It clears the PE registers, skew registers,
  controller state and memory output registers, not the memory contents.

## What comes from the paper and what does not

From the paper: the array size and 8-bit integer MACs; WS dataflow with psums moving down
the columns and one output channel per column; the one-cycle parallel preload from the
RRAM and the one-cycle IFMAP multicast; the per-fold cycle structure; SRAM sizes (2 MB,
16 banks, 16-byte words); RRAM organisation (4 tiers x 64 banks x 128 KB, 256-byte words,
9 address bits); one read and one write port per bank, all banks accessible in parallel.

This implementation's own choices, where the paper says nothing: signed operands and
24-bit accumulators; the row skew register file; the shift-and-saturate requantisation to
bytes (chosen because the OFMAP SRAM's 256 bytes per cycle give exactly one byte per
column); one-cycle memory read latency; the mapping of rows, columns and vectors onto banks
and bytes; the fold command interface and sequential address generation; the prefetch of
the next tile in the last drain cycle; the host ports.

Not built:

* **Accumulation across reduction folds.** When a layer's reduction length (input channels
  x filter height x filter width) exceeds 256, it must be split over several tiles whose
  psums are added. The paper counts these folds but does not say where the partial sums
  are kept, and the OFMAP SRAM as specified (one byte per column per cycle) cannot hold
  24-bit psums at full rate. In this RTL each fold produces finished bytes, so such layers
  are not computed exactly. This is the largest gap between the RTL and a complete
  inference engine.
* IFMAP address generation (im2col), pooling, activation functions and the off-chip DRAM
  interface, none of which the paper describes.
* Anything physical: the MIVs, the RRAM and SRAM circuits, the clock (the paper evaluates
  500, 700 and 1000 MHz), thermal behaviour. The memories are behavioural arrays.

## Capacity for the evaluated networks

The paper evaluates ResNet-18, ResNet-34 (called ResNet-32 in one place), ResNet-50,
GoogLeNet, MobileNet (V1 in the text, V2 in the result plots) and EfficientNet-B0, batch
size 1. Counting weight tiles as `ceil(K/256) * ceil(M/256)` per layer (K reduction
length, M output channels) from the standard layer shapes: ResNet-18 needs 201 tiles,
ResNet-34 371 and ResNet-50 422, all within the 512 tiles of the RRAM, so the weights of
every evaluated network stay on chip. The other three networks have fewer weights than
ResNet-50. Every one of them, however, has layers with K > 256, which need the cross-fold
accumulation listed above; so the RTL can hold these networks but not run them end to
end. Layers whose output has more than 8192 pixels (the first ResNet layers: 112 x 112)
must also be split into several folds over pixel ranges, which the command interface
allows.

## Simulating

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<n>`:

| testbench | what it checks |
|-----------|----------------|
| `tb_ws_pe` | MAC result, weight load and hold, cycle by cycle |
| `tb_ws_pe_array` | dot products of a 6 x 5 array, output latency, one-cycle tile replacement |
| `tb_sram_banked` | random parallel reads and writes on all banks against a reference copy |
| `tb_filter_rram` | bank-decoded writes, all-bank reads, output hold |
| `tb_ws_controller` | full per-cycle schedule of 40 random folds, back-to-back and with gaps |
| `tb_ws_mono3d_top` | 8 x 8 accelerator, five folds end to end, timing and every output byte, host IFMAP writes while folds run |
| `tb_ws_mono3d_full` | one fold on the full 256 x 256 accelerator at default parameters |

With Verilator 5 (run from the directory that holds `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Irtl -Itb rtl/ws_mono3d_pkg.sv \
          tb/tb_ws_mono3d_top.sv --top-module tb_ws_mono3d_top -o sim
./obj_dir/sim
```

The reduced-size testbenches build and run in seconds to a minute. Two more run larger
configurations:

| testbench | what it runs |
|-----------|--------------|
| `tb_ws_mono3d_large` | one fold on a 64 x 64 accelerator with 16-byte SRAM words and 8192-word banks |
| `tb_ws_mono3d_resnet` | two 1x1 convolution layers of ResNet-50 (56 x 56 x 64 -> 64 -> 256) on the 64 x 64 accelerator, five folds of 3136 vectors, about a million output checks |

The full 256 x 256 configuration passes lint and elaboration, but Verilator turns its
65,536 PE instances into several hundred megabytes of C++, whose build does not finish in
a practical time; 64 x 64 is the largest size simulated here. The RTL is the same at every
size (the array is a generate loop over identical PEs), so the larger runs exercise the
same logic.

To change the size, override the parameters of `ws_mono3d_top`; keep
`SRAM_BANKS * SRAM_WORD_BYTES = ROWS = COLS` and `RRAM_TIERS * RRAM_BANKS_PER_TIER = ROWS`
(checked at elaboration).
