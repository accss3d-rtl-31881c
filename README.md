# AccSS3D: an accelerator for spatially sparse 3D convolutions

3D scene networks (semantic segmentation of indoor scans, LiDAR object
detection, scene completion) work on voxel grids that are more than 99% empty.
The occupied ("active") voxels lie on surfaces. A submanifold 3x3x3
convolution computes outputs only at active voxels, so its work is a list of
(input voxel, output voxel, weight plane) triples rather than a dense loop.
Dense accelerators waste nearly all their work on such layers. General sparse
matrix accelerators spend their time finding neighbours and re-fetching data.

AccSS3D attacks the problem at two points:

* **AdMAC** builds the neighbour lists (the convolution metadata) in
  hardware, from a plain list of voxel coordinates.
* **SSpNNA cores** consume that metadata. Each core regroups the work by
  weight plane, so one weight block is fetched once and applied to many voxel
  pairs. Eight dense 16-MAC units (DeNNs) then run the matrix-vector products
  with weights passed systolically and input features multicast.

Eight cores with 64 KB of local memory each share a dual-buffered 2 x 1 MB L2.
Two table-driven DMA engines and an event controller move tiles between DRAM,
L2 and the cores without the host.

This repository is synthesizable SystemVerilog for that chip:

* 1024 FP32 multipliers;
* an L1–L2 shared bus of 128 B/clk;
* a DRAM port of 48 B/clk.

The rest of this document explains how each part works, the data formats the
hardware uses, where the RTL departs from the published description, and how
to simulate it.

## Metadata: what a core reads

A tile is a set of active voxels with their input feature maps (IFM). It
carries *COIR metadata*: one entry per centre voxel. The 27 positions of the
3x3x3 neighbourhood are numbered

    k = 9*(dz+1) + 3*(dy+1) + (dx+1)        (k = 13 is the centre itself)

An entry is a 27-bit mask of the active neighbours, plus the index of the
centre voxel, plus the indices of the active neighbours in mask-bit order.
The mask and index words sit at `hdr_base + 2e` and `hdr_base + 2e + 1`. The
neighbour indices of all entries are packed one after another from
`idx_base`.

The same metadata serves both directions of a convolution:

* **CIRF** (centre is the output): neighbour `j` contributes
  `W[k] · IFM[j]` to `OFM[centre]`.
* **CORF** (centre is the input): the centre contributes `W[k] · IFM[centre]`
  to `OFM[j]`.

One descriptor bit selects the flavour.

A core's L1 is word addressed (32-bit words, 16384 words = 64 KB). It holds,
from address 0:

| word | content |
|---|---|
| 0 | number of metadata entries |
| 1..5 | base addresses: headers, neighbour indices, IFM, weights, OFM |
| 6 | `{corf, 2'b0, mode[1:0]}`: 0 = A, 1 = B, 2 = C |
| 7 | `{N/4 [15:8], C/4 [7:0]}` |

The data regions have these layouts:

* **IFM:** row-major, `ifm_base + voxel*C + c`.
* **OFM:** `ofm_base + voxel*N + n`. The OFM must be zero (or hold a bias)
  before the tile, because the core accumulates into it.
* **Weights:** in 4x4 blocks, word
  `wt_base + ((k*N/4 + ng)*C/4 + cg)*16 + p*4 + j` holds `W[k][4ng+p][4cg+j]`.

All values are IEEE-754 FP32. C and N are multiples of 4, with C ≤ 64.

## SSpNNA core

### WAVES: reordering work by weight plane

The front-end (`waves`) turns the voxel-ordered metadata into plane-ordered
work. It has three parts:

1. **`mt_hdr_proc` (header processor)** reads one header at a time. Each cycle
   it takes the four lowest set bits of the remaining mask ("smart lookup")
   and reads their four neighbour indices. This gives up to four
   (input, output, plane) pairs per cycle.
2. **`hdr_format`** has 27 tuple builders, one per plane. A builder collects
   four pairs into a tuple and emits the tuple when it is full. At the end of
   a batch, partial tuples are flushed.
3. **`ll_buf` (link-list buffer)** stores tuples in per-plane linked lists
   inside one of two 8 KB halves (512 slots of 16 B). Slots are allocated on
   demand, so a plane with many neighbours takes as much space as it needs.

While one half fills, the other half is drained to the back-end plane by
plane, one tuple per cycle. The header processor accepts a new header only
while the filling half has room for a worst-case entry plus a flush (54
slots). When the half is full or the metadata ends, the builders are flushed
and the halves swap. A tile with more work than one half runs in several
*batches*. This ping-pong is what lets the metadata be reformatted while the
back-end computes.

### SyMAC: systolic weights, multicast inputs

The back-end (`symac`) has eight DeNNs. Each DeNN has four PEs of four FP32
multipliers. A PE multiplies four input channels by four weights, adds them in
a two-level tree and accumulates along the input channels. A DeNN therefore
computes a 4-output x 4-input block per cycle, and the eight DeNNs give 128
MAC/cycle.

Each DeNN keeps one IFM row (up to 64 channels) in its IC data buffer. That
row is multicast to its four PEs.

The DeNN scheduler (`denn_sched`) groups DeNNs into systolic groups inside
each cluster of four, according to the mode:

| mode | groups per cluster of 4 DeNNs |
|---|---|
| A | 2 + 2 |
| B | 4 |
| C | 3 + 1 |

A tuple's pairs are spread over the DeNNs of one group, one pair per DeNN, and
all of them share the plane's weights. The scheduler first loads each DeNN's
IFM row (C/4 cycles). It then streams the plane's weight blocks for every
(output group, input group) into the group leader. Each DeNN passes the
block on to its neighbour one cycle later. Small groups keep more groups
busy on sparse planes; large groups reuse a weight block more times.

The per-pair results (4 outputs) go to **ACC OFMs** (`acc_ofm`), a 16-line
fully associative cache keyed by OFM address:

* A hit accumulates in place.
* A miss takes a free line, or evicts the round-robin victim to **Mem Ctrl**
  (`mem_ctrl`). Mem Ctrl reads the L1 words, adds the partial sum and writes
  them back.

At the end of a tile the cache is flushed.

### Control and L1

`sspnna_ctrl` reads the descriptor and starts WAVES. It waits until WAVES is
done and SyMAC is idle, flushes ACC OFMs, and signals done.

`l1_mem` models the L1 as a multi-ported word array:

* 16 read ports of 16 words, shared by the header, index, weight, IFM and
  Mem Ctrl reads;
* one 32-word read/write port.

`l1_arbiter` gives the wide port to the core's write-backs while it computes,
and to the DMA otherwise.

## Chip level

`accss3d_top` connects:

* **eight `sspnna_core`s** with their L1s;
* **L1-DMA** (a `dma_engine` with 32-word beats): L2 ↔ a core's L1 over the
  shared bus. The core is named in the DMA entry.
* **L2-DMA** (a `dma_engine` with 12-word beats): DRAM ↔ L2.
* **L2:** two `l2_mem` halves of 1 MB, selected by word-address bit 18. Tile
  *t* uses half *t mod 2*, so one tile is computed while the next is loaded.
* **Global Event Controller** (`gec`).
* **AdMAC** (`admac`).

The host and DRAM are outside the chip; their signals are ports.

### DMA tables and the event controller

The host writes DMA tables to DRAM once per layer. Both engines fetch them
themselves. An entry is four words:

| word | content |
|---|---|
| 0 | source word address |
| 1 | destination word address |
| 2 | length in words |
| 3 | flags |

The flag bits are:

| bit(s) | meaning |
|---|---|
| [0] | end of segment |
| [1] | start the target core after this segment |
| [2] | end of an L2 tile |
| [3] | direction (0: port 0 → port 1) |
| [11:8] | target core |

An engine runs a *segment* (entries up to an end-of-segment flag) per `run`.
It holds each entry until `xfer_ok`, then moves it in full-width beats with
a partial mask on the last beat.

On a layer command, the event controller runs two sequencers.

**L2 sequencer.** It loads L2 tiles while fewer than two are waiting to be
stored. It stores a tile once all its core work is done. The L2 table must
therefore list segments in the order

    load 0, load 1, store 0, load 2, store 1, ..., store n-1

**L1 sequencer.** Once an L2 tile is loaded, it runs that tile's L1 segments
one after another. A segment with the start flag starts its core. An entry
aimed at a core is held while that core computes, so a store of results waits
for its core by itself. This gives the paper's round-robin data exchange:
only one core uses the shared bus at a time, while the others compute.

### AdMAC

AdMAC makes the metadata above from a list of voxel words
`{z[9:0], y[9:0], x[9:0]}`. It runs in two passes over the list, both
streamed by `admac_fetch`:

1. **Build.** `admac_lut` inserts every voxel into a two-level table.
   * Level one has one valid bit and one row pointer per *voxel 3D group* of
     4 (x) x 8 (y) x 4 (z).
   * Level two holds one row per active group. A row is 8 banks, selected by
     `{y[2], z[1:0]}`. Each bank has 16 lanes, selected by `{y[1:0], x[1:0]}`,
     and each lane holds an active bit and a 32-bit voxel index.
2. **Adjacency.** `admac_adj` computes the 27 neighbour positions of each
   voxel and looks up their groups in level one. It then reads level two, where
   each bank serves one row per cycle.

Because of this bank mapping, the 3x3x3 neighbourhood of a voxel inside a
group falls into different banks or the same row. Its 26 neighbours therefore
come back in one cycle. A voxel near a group boundary needs rows of several
groups in the same bank, which takes extra cycles.

The entry is then written out one word per cycle. `admac_memarb` shares the
single memory port between reads and writes.

## Where this RTL departs from the paper

The paper describes the architecture at block level. Everything below is this
design's own choice:

* **Formats and sizes:**
  * the descriptor, metadata and DMA-entry formats;
  * the tuple size of four pairs;
  * the ACC OFMs size (16 lines);
  * the AdMAC grid (128³) and table size (512 groups).
* **FP32 arithmetic:** round-to-nearest-even, but subnormals flush to zero
  and NaNs are not propagated. Each PE does a single-cycle multiply and
  accumulate.
* **Unpipelined core phases:** a DeNN group loads the IFM rows of its next
  tuple only after it has drained the previous one. Measured on small random
  tiles, a core reaches 20–25% of its 128 MAC/cycle peak. The paper's
  utilisation figures assume better overlap, which it does not describe.
* **Simplified AdMAC pipeline:** AdMAC handles one voxel at a time (lookup,
  then write). The paper's queues and latency FIFOs are not reproduced.
* **DRAM ports:** each requester has its own port (L2-DMA data, two table
  ports, AdMAC). There is no model of a DRAM controller.
* **Fig. 12 labels:** the AdMAC figure legend swaps the roles of blocks B and
  C relative to the text. The RTL follows the text: B builds the lookup table
  and C builds the adjacency lists.
* **Software parts not built:** the host-side software is not hardware and
  has no RTL here. It produces the tiles, the per-layer choice of systolic
  mode and the DMA tables. It comprises the dataflow optimiser SOAR/SPADE,
  the point-cloud reordering CAROM and the tile scheduling.
* **Memories:** memories are plain arrays, not SRAM macros.

### Which workloads fit

The evaluated networks are SCN on ScanNet, PV-RCNN on Waymo and SGNN. Their
full scenes are tens to hundreds of MB, so they run as tiles. One core tile
must satisfy

    16 + 29·V + V·C + 27·N·C + V·N ≤ 16384 words

where V is the number of voxels. For the published ScanNet layer sizes
(the numbers are (V, C, N)):

* (28, 16, 32), (12, 16, 32) and (212, 8, 16) fit in one tile.
* (860, 8, 8) needs about three tiles.

## Files

All modules are in `rtl/`. The shared package is `accss3d_pkg`, which holds
the types, constants and FP32 functions. The module tree is:

    accss3d_top
    ├── gec
    ├── dma_engine (x2)
    ├── l2_mem (x2)
    ├── admac ── admac_fetch, admac_lut, admac_adj, admac_memarb
    └── sspnna_core (x8)
        ├── l1_mem, l1_arbiter, sspnna_ctrl
        ├── waves ── mt_hdr_proc, hdr_format, ll_buf
        └── symac ── denn_sched, denn (x8, each 4 x pe), acc_ofm, mem_ctrl

Every file starts with a comment on its function, interface, timing, and
which parts follow the paper.

## Simulation

The testbenches in `tb/` are self-checking. Each prints
`TB_RESULT checks=<n> failures=<m>`.

| testbench | what it runs |
|---|---|
| `tb_sspnna_core` | One core on random tiles in modes A, B and C, CIRF and CORF, including a dense tile that needs two WAVES batches. Checks every OFM word, the MAC-beat count and a cycle bound. |
| `tb_admac` | AdMAC on its own. Checks every metadata word against a brute-force neighbour search, that interior voxels take one lookup cycle, and that boundary voxels take more. |
| `tb_accss3d_top` | The whole chip with 2 cores and 64 KB L2 halves. First an AdMAC run, then a 3-tile layer DRAM → L2 → L1 → L2 → DRAM. Checks every metadata and OFM word, the DMA beat counts (32 and 12 words per beat), and that each mechanism occurs: multi-cycle AdMAC lookup, mode switch, WAVES batch switch, ACC hit and eviction, DMA held for a busy core, and L2 load overlapped with compute. |
| `tb_accss3d_full` | The same test with the chip at its full default size (8 cores, 2 x 1 MB L2). |

The benches use small integer data, so every FP32 result is exact whatever
the summation order. DRAM and the host are behavioural code inside the
benches.

With Verilator 5 (shown for the chip test):

    verilator --binary --timing --assert -Irtl rtl/accss3d_pkg.sv \
        $(ls rtl/*.sv | grep -v accss3d_pkg) tb/tb_accss3d_top.sv \
        --top-module tb_accss3d_top -o sim
    ./obj_dir/sim

The full-size chip takes several minutes to compile; its simulation is
short.
