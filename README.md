# A SparseCore for embedding lookups and updates

Recommendation models turn each categorical input (a search word, a video id)
into a dense vector by looking it up in an embedding table. The tables are
huge, from megabytes to terabytes, so they are sharded over the HBM of many
chips. A lookup is a small gather: a few rows out of a table of millions.
Training the table is a small scatter: the gradients of each row used in the
batch are summed, and only those rows are rewritten. Work like this has almost
no arithmetic. It is limited by memory accesses and by the many small all-to-all
transfers between chips. A wide matrix engine handles it badly.

TPU v4 gives this work its own engine, the **SparseCore** (SC), four per
chip. An SC is a small dataflow machine. A sequencer hands coarse, CISC-like
instructions to a dispatch stage. Dispatch starts five *cross-channel units*
that work on whole streams of (feature id, vector) elements: DMA, Sort,
Sparse Reduce, Fork and Concat. It also starts 16 *compute tiles*. Each tile
owns one HBM channel and one bank of the SC's 2.5 MiB sparse vector memory
(Spmem). It has a Fetch Unit that reads HBM into Spmem, an 8-lane SIMD
vector unit (scVPU) and a Flush Unit that writes Spmem back to HBM.

This repository is synthesizable SystemVerilog for one SparseCore built
that way. It has self-checking testbenches for every block and an end-to-end
test that runs a lookup and an SGD update at full size.

The public description of TPU v4 (Jouppi et al., ISCA 2023) gives the block
diagram, the unit names, the tile contents and the sizes: 16 tiles, 8 lanes
and 2.5 MiB of Spmem. It gives almost nothing about how any unit works inside.
Everything below that level is this design's own. That covers the instruction
set, the stream format, the sorting method, the sharding rule, the handshakes
and all timing. Each such choice is marked in the file that makes it.

## The two data paths

```
            host program
                 |
          SparseCore Sequencer --> Dispatch --> (starts every unit below)

  ICI in --> DMA --> Sort --> Sparse Reduce --> Fork ==16==> tile Fetch Units
                                                               |  Spmem bank
                                                               |  scVPU
  ICI out <-- DMA <-- Concat <=========16=================== tile Flush Units
                                                               |
                                                         HBM channel (x16)
```

**Inbound (ids and gradients into the tiles).** `DMA_IN n` takes `n` elements
from the ICI (inter-chip interconnect) port and marks the n-th one as last.
The **Sort Unit** collects the list, up to 64 elements, and sorts it by id.
The **Sparse Reduce Unit** then merges each run of equal ids into one element
whose vector is the lane-wise sum of the run. For a lookup this removes
duplicate ids, so each row is read once. For a training step it sums every
gradient of a row before that row is updated once. The **Fork Unit** sends
each element to the tile that owns its row. Rows are sharded by id:
tile = id mod 16, and the row inside that tile's table is id / 16. When the
stream ends, the Fork Unit gives every tile an end-of-stream marker.

**Outbound (rows out of the tiles).** A tile's `T_EMIT` sends (id, row) pairs
from its Spmem to the **Concat Unit**. Concat joins the streams of the
selected tiles round robin into one stream that ends with exactly one last
element. `DMA_OUT` passes that stream to the ICI output port and counts it.

Elements from different tiles interleave on the output. A receiver must go by
the id carried in each element, not by position.

In the published block diagram the Concat Unit's output line runs straight
to the ICI side of the SparseCore. Here it passes through the DMA Unit's
outbound engine instead, so that one instruction (`DMA_OUT`) frames and
counts every transfer leaving the SparseCore. The links from DMA to Sort and
from Sparse Reduce to Fork are not drawn there either; they are this design's
reading of the unit names.

## Stream elements and end markers

Every cross-channel stream carries `elem_t` (`rtl/sc_pkg.sv`):

| field | bits | meaning |
|---|---|---|
| `id` | 32 | feature id (vocabulary index) |
| `vec` | 8 x 32 | one embedding row or gradient, 8 signed 32-bit lanes |
| `last` | 1 | final element of this stream |
| `empty` | 1 | no data: the element only marks the end of the stream (`last` is then set) |

Each stream is a plain valid/ready pair. Data moves in a cycle where both are
high.

The end marker is what lets variable-length work finish without a length
being known in advance. The most delicate point is the step from one stream
to sixteen. The Fork Unit turns the final element into a data element without
`last`, followed by one `empty`+`last` marker for each of the 16 tiles. Each
tile takes its marker whenever it is ready. A tile's gather ends when it has
seen the marker and all its HBM reads have returned. Going back from sixteen
to one, the Concat Unit drops the markers of all but the final tile.
Zero-length cases are carried through the same way:

- `DMA_IN 0` sends a single marker.
- The Sort and Sparse Reduce units pass a lone marker on.
- A tile that gathered nothing answers `T_EMIT` with a marker.

A consequence: a `T_GATHER` must address all 16 tiles. Fork sends a marker to
every tile, and the stream stalls until each one has taken it.

## Instructions and how they overlap

The sequencer reads a program of up to 256 instructions (`instr_t`) that the
host wrote through `imem_we/imem_addr/imem_wdata`. It starts on a `start`
pulse and raises `done` after `HALT`.

Dispatch issues instructions strictly in program order. It holds an
instruction only while the unit it names is busy. Consecutive instructions
that name different units therefore run at the same time. That is how a
program overlaps the inbound path, the tiles and the outbound path.

| opcode | unit | operation |
|---|---|---|
| `DMA_IN len` | DMA in | take `len` elements from ICI into the Sort Unit |
| `DMA_OUT` | DMA out | send the Concat stream to ICI until its last element; count it in `dma_out_count` |
| `CONCAT mask` | Concat | join the `T_EMIT` streams of the tiles in `mask` |
| `T_FETCH mask,hbm,spa,len` | tiles | HBM[hbm+i] -> Spmem[spa+i] |
| `T_GATHER hbm,spa,spb` | tiles | for the k-th element from Fork: HBM[hbm + id/16] -> Spmem[spa+k], vector -> Spmem[spb+k], id -> id list |
| `T_VPU mask,op,spa,b,spb,len,shift` | tiles | Spmem[spb+i] = op(Spmem[spa+i], Spmem[b+i]); `b` is in the `hbm` field |
| `T_FLUSH mask,hbm,spa,len` | tiles | Spmem[spa+i] -> HBM[hbm+i] |
| `T_SCATTER mask,hbm,spa` | tiles | Spmem[spa+k] -> HBM[hbm + id_k/16] |
| `T_EMIT mask,spa` | tiles | (id_k, Spmem[spa+k]) -> Concat |
| `FENCE` / `HALT` | - | wait until every unit and stream is idle (`HALT` then stops) |

For the tile operations, `len = 0` means "as many as the last gather left in
this tile". The scVPU operations are add, subtract, multiply (low 32 bits),
max and an SGD step `a - (b >>> shift)`, whose learning rate is a power of two.

A tile runs one instruction at a time, so instructions on one tile are
ordered by hardware. Across tiles and cross-channel units, order comes from
program order plus the busy checks. `FENCE` covers what those do not.

**Forward lookup:**

```
DMA_IN 48          ids arrive, are sorted, deduplicated and forked
T_GATHER all       each tile reads the rows of its ids into Spmem
DMA_OUT            outbound engine waits for the Concat stream
CONCAT all
T_EMIT all         waits until the gather has finished (tile busy), then sends
HALT
```

**Training update** (one SGD step on every row touched in the batch):

```
DMA_IN 40                       (id, gradient) pairs; equal ids are summed on the way
T_GATHER all hbm=0 spa=0 spb=512    weights -> Spmem[0..], summed gradients -> Spmem[512..]
T_VPU all SGD a=0 b=512 dst=0 shift=2
T_SCATTER all hbm=0 spa=0       updated rows back to their places in HBM
HALT
```

## Inside a tile

`sc_tile` wraps the Fetch Unit, the scVPU, the Flush Unit, one Spmem bank and
the id list. Because only one unit is busy at a time, the units share the
bank's ports and the HBM channel through plain multiplexers.

- **Fetch Unit** (`sc_fetch_unit`). It issues at most one HBM read per cycle
  and keeps up to `MAX_OUTSTANDING` = 16 reads in flight. Each read's tag is
  its Spmem offset, so responses may return in any order. The HBM response
  port has no back-pressure; the outstanding limit is what makes that safe.
  With a 40-cycle HBM latency, a long contiguous fetch is held by that limit.
  The end-to-end test checks that this happens.
- **scVPU** (`sc_scvpu`). It reads both operand rows in one cycle through the
  bank's two read ports and writes the result the next cycle. A run of n rows
  takes n+1 cycles. Working in place is safe.
- **Flush Unit** (`sc_flush_unit`). It reads Spmem one cycle ahead into a
  two-entry queue, so it sends one row per cycle when not back-pressured. It
  either writes to HBM (contiguous or scattered by the id list) or sends to
  Concat.
- **Spmem bank** (`sc_spmem_bank`). 5120 rows of 32 bytes, which is 2.5 MiB
  split over 16 banks. It has two write ports, where port 0 wins on a clash,
  and two synchronous read ports that return old data on a same-cycle write.
  It is written as an array; a chip would use SRAM macros.

## The cross-channel units in detail

- **Sort** (`sc_sort_unit`). It fills a 64-entry buffer until `last`, then runs
  one odd-even transposition pass per cycle, as many passes as there are
  entries, then drains in ascending id order. Its run time depends on the
  list length. A longer list is handled in batches of 64 (the `overflow`
  pulse). Each batch is sorted on its own, so an id repeated in two batches is
  not merged, and a training update then writes that row twice, the second
  write winning. Programs should keep update lists to 64 elements.
- **Sparse Reduce** (`sc_sparse_reduce`). It has one accumulator and one output
  register, takes one element per cycle, and sums with wrap-around. `merge`
  pulses for every folded element.
- **Fork** (`sc_fork_unit`). One shared data bus with a valid per tile; a data
  element moves in the cycle its tile is ready.
- **Concat** (`sc_concat_unit`). Combinational round robin among the tiles that
  are still pending and have valid data.
- **DMA** (`sc_dma_unit`). Two independent pass-through engines with counters.
  The `last`/`empty` bits arriving from ICI are ignored: the instruction's
  length frames the transfer.

## Sizes

| quantity | value | from |
|---|---|---|
| compute tiles per SC | 16 | TPU v4 description |
| scVPU width | 8 lanes | TPU v4 description |
| Spmem per SC | 2.5 MiB = 16 x 5120 rows x 32 B | size from the description; 32-byte rows chosen here |
| SparseCores per chip | 4 (this RTL is one) | TPU v4 description |
| lane format | 32-bit signed integer | chosen here (TPU v4 uses floating point) |
| outstanding HBM reads per tile | 16 | chosen here ("multiple" in the description) |
| sort buffer | 64 elements | chosen here |
| ids per tile per gather | 256 | chosen here |
| program memory | 256 instructions | chosen here |

All RTL parameters default to these values, and the end-to-end test runs
with them.

## What this RTL does not contain

- **The TensorCores**: four 128x128 matrix units, a 128-lane vector unit,
  16 MiB VMEM and 128 MiB of shared CMEM per chip. They are described
  elsewhere, and the TPU v4 description gives only their sizes.
- **The ICI links and router.** The SC's ICI side is a pair of element streams
  on the top-level ports.
- **The optical circuit switches** that wire 4x4x4 blocks into a
  4096-chip torus, regular or twisted.
- **HBM.** Each tile's channel is a port. The testbenches use a behavioural
  channel model (`tb/hbm_model.sv`) with a fixed latency (optionally plus a
  random extra delay, which reorders responses) and random
  back-pressure.
- **Floating point, and table rows wider than 8 lanes.** A wider table would
  be stored as several 8-lane column slices and processed one slice per pass.

## Files

`rtl/` holds one module or package per file:

| file | contents |
|---|---|
| `sc_pkg.sv` | types and constants |
| `sparsecore.sv` | top level |
| `sc_sequencer.sv` | sequencer |
| `sc_dispatch.sv` | dispatch |
| `sc_dma_unit.sv` | DMA Unit |
| `sc_sort_unit.sv` | Sort Unit |
| `sc_sparse_reduce.sv` | Sparse Reduce Unit |
| `sc_fork_unit.sv` | Fork Unit |
| `sc_concat_unit.sv` | Concat Unit |
| `sc_tile.sv` | compute tile |
| `sc_fetch_unit.sv` | Fetch Unit |
| `sc_scvpu.sv` | scVPU |
| `sc_flush_unit.sv` | Flush Unit |
| `sc_spmem_bank.sv` | Spmem bank |

`tb/` holds one self-checking testbench per module (`tb_<module>.sv`) and the
HBM model. Each testbench compares against values it computes itself. It ends
by printing `TB_RESULT checks=N failures=M` and has a watchdog.

`tb_sparsecore` runs the whole SC at default sizes:

- a lookup of 48 ids with repeats;
- an SGD update of 40 gradients with repeats, checking every HBM row;
- a 100-id lookup that overflows the sort buffer;
- a 64-row fetch, add and flush.

ICI and HBM back-pressure are random throughout. The test also fails unless
four events each happen at least once: a dispatch stall, a duplicate merge, a
sort overflow and the outstanding-read limit.

`tb_mlperf_dlrm_lookup` runs the embedding lookup of one training step shaped
like the MLPerf DLRM benchmark. That is 26 univalent features for 128 examples,
or 3328 ids, looked up in 52 batches of 64 on one SparseCore. Every returned
row is checked. The step takes about 13,100 cycles with a 40-cycle HBM model.

## Simulating

Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/sc_pkg.sv tb/tb_sparsecore.sv \
          --top-module tb_sparsecore -o sim --Mdir obj
./obj/sim +verilator+rand+reset+2
```

Replace `tb_sparsecore` with any other `tb_*` module to test one block. The
full-size run takes a few seconds. To lint:

```
verilator --lint-only -Wall -Irtl rtl/sc_pkg.sv rtl/sparsecore.sv --top-module sparsecore
```

The remaining lint warnings are unused instruction fields in units that
ignore them, the unused upper bits of the id in `owner_tile`, and
SYNCASYNCNET. SYNCASYNCNET appears because the concurrent assertions sample
the asynchronous reset in their `disable iff`.

## How far to trust it

Every block passes its own testbench, and each testbench was shown to fail on
a deliberately broken copy of its block. The end-to-end test covers the
lookup and update flows described above at full size. Not covered:

- several SparseCores sharing a chip;
- real ICI traffic;
- HBM responses that return out of order, except in the Fetch Unit's own
  test (the channel model returns them in order unless given a random extra
  latency);
- programs that break the rules given above: a gather to only some tiles, or
  update lists over 64 elements.

Timing closure and area were not studied; the sort network in particular is
a full compare-swap array.
