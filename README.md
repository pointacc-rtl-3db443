# A point cloud accelerator in SystemVerilog

Point cloud networks spend much of their time on *mapping* rather than on
arithmetic. Mapping means working out which input point feeds which output
point through which weight. Three operations need it:

- kernel mapping for sparse 3D convolution;
- k-nearest-neighbour and ball-query search;
- farthest point sampling.

All three come down to ranking points, by coordinate or by distance. This
design therefore runs every mapping operation on one sorting-network
datapath. It then feeds the resulting maps to a weight-stationary systolic
array, through a memory unit that fetches input features only when a map
needs them.

The design has three parts, connected in a chain:

```
 sorter buffer ─┐                                            ┌─ DRAM (features in, outputs out)
 merger buffer ─┤ Mapping Unit ──maps──► Map FIFO ──► Memory Management Unit ─► Matrix Unit
                │ (FS CD ST BF MS DI)     (p,q,w)    (cache, MIR container,      (64x64 systolic
                └──── FPS write-back                  loop control, psum acc.)    array)
```

A *map* is a triple (p, q, w). It means that input point p contributes to
output point q through weight matrix w.

## Mapping Unit (`mapping_unit`)

The unit is a six-stage pipeline:

- **FS** fetches a buffer row. It also writes updated distances back during
  FPS.
- **CD** computes distances (`distance_unit`).
- **ST** holds two sorters of N/2 = 32 elements (`bitonic_sorter`).
- **BF** registers the two sorted halves.
- **MS** is an N = 64 element merger (`bitonic_merger`, `merge_stream`).
- **DI** is the intersection detector (`intersection_detector`).

Every element is a `cmp_t`: a 48-bit key, a valid bit, a source bit and a
point index. A buffer row holds 32 points.

### Kernel mapping

This is the hardest part of the design to follow.

Output point q needs input point p for kernel offset δ exactly when
p + δ = q. So the unit adds δ to every input coordinate (`coord_transform`).
Both clouds are stored sorted by the key {x, y, z}, with sign bits flipped so
that an unsigned compare is lexicographic. The unit merges the shifted input
cloud with the output cloud into one sorted stream. Any coordinate present
in both clouds then shows up as two adjacent equal keys from different
sources.

The clouds are longer than one window, so `merge_stream` merges them one
32-element window per cycle, using a forwarding loop:

1. **Advance one window.** Each cycle it advances the stream whose window
   tail is smaller.
2. **Set the threshold.** The smaller of the two tails is the threshold.
   Everything at or below it is final; everything above may still be
   overtaken by elements not yet read.
3. **Emit and hold.** The 64-way merge of the two current windows therefore
   yields at least 32 final elements. The first 32 are emitted, and the
   remaining final ones are held in a register.
4. **Re-insert.** Next cycle the held elements replace the first entries of
   the new merge result. Those entries are elements that are merged again
   because their window was not consumed.

A merge of streams of length a and b therefore takes ⌈a/32⌉ + ⌈b/32⌉
cycles, plus one cycle to flush.

The detector flags equal neighbouring pairs and forms a map from each pair.
It also checks the last element of the previous window, so a pair split
across two windows is still found. It then compacts the maps to the front
with log2(32) shift stages, driven by the prefix count of non-maps.

A serialising register sends maps out one per cycle. While that register is
full the merge stalls.

### kNN and ball query

The unit fetches one query point, then streams two input rows per cycle
through CD and the two sorters. It merges the sorted halves and truncates
them to 32 elements. It then merges that result with the running best-32
list and truncates again: a top-k by truncated merge sort.

Ball query marks points beyond r² invalid before sorting. The first
min(k, candidates) entries come out as maps with w = rank.

### Farthest point sampling

The sorter buffer's points carry their current distance to the sampled set.
Each pass goes through the cloud one row per cycle:

- CD replaces each stored distance by min(stored, distance to the newest
  sample), and FS writes it back.
- The last element of the sorted row is the row maximum.
- A history register keeps the pass maximum, which becomes the next sample.

## Memory Management Unit (`memory_management_unit`, `mir_container`)

### Sparse mode (fetch on demand)

Maps arrive grouped by weight:

- **Weight change.** When a map's weight differs from the matrix held in the
  array, the MMU drains the array and loads the new matrix, which takes 64
  cycles. This is the weight-stationary inner loop.
- **Input cache.** The input feature buffer is a direct-mapped cache. Its
  block of 2^log_bs consecutive points is set per layer. The MIR container
  serves as the tag array; each MIR (Memory Meta Info Register) holds a tile
  id, capacity, offset, occupancy and tail.
- **Miss.** A miss reads the whole block from DRAM in one request.
- **Accumulation.** Results are added into output-buffer row q by
  read-modify-write. A forwarding path handles back-to-back updates of the
  same row.
- **Write-back.** Rows are written to DRAM once all maps are done. This is
  the output-stationary outer loop.

### Dense mode (fully connected / 1x1 layers)

The MMU walks contiguous points in tiles of 2^log_bs points. The MIR
container acts as a two-entry FIFO. Each tile is read from DRAM while the
previous tile is being computed, and is released when it is finished.

### MIR container

The container also has a stack mode, for temporal layer fusion. It is
verified on its own, but no controller in the MMU drives it yet.

## Matrix Unit (`matrix_unit`, `systolic_array`)

The matrix unit is a 64 × 64 weight-stationary array:

- Row i holds input channel i and column j holds output channel j.
- Inputs are skewed by one cycle per row and outputs de-skewed per column.
- A valid/tag pipe of length ROWS + COLS − 1 = 127 cycles carries each
  output point index alongside its data.
- One feature vector is accepted per cycle.
- Weights can only be loaded while the array is empty, which an assertion
  checks.

## Sizes, number formats and choices

| Item | Value | Where it comes from |
|---|---|---|
| Array | 64 × 64 | as in the published design |
| Sorter width N | 64 (two halves of 32) | chosen |
| Coordinates | 16-bit signed; key of 48 bits | chosen |
| Features and weights | 8-bit signed | chosen |
| Partial sums | 32-bit | chosen |
| Sorter and merger buffers | 128 rows × 32 points | chosen |
| Input feature buffer | 4096 × 64 × 8 bit = 256 KB | chosen |
| Output feature buffer | 1024 × 64 × 32 bit = 256 KB | chosen |
| Weight buffer | 27 matrices × 64 × 64 × 8 bit = 108 KB | chosen |
| MIRs | 64 | chosen |
| Map FIFO | 64 entries | chosen |

Only the total on-chip SRAM (776 KB) and the array size are taken from the
published design. The split of the SRAM, all widths and all handshakes are
this design's own. Buffers are register arrays; a real chip would use SRAM
macros.

Other choices specific to this design:

- One cache miss is outstanding at a time.
- kNN keeps at most 32 neighbours.
- FPS handles 32 points per cycle, not 64.
- Kernel mapping needs both clouds stored in coordinate order, with point
  index equal to buffer position.

## What is not built

- Downsampling by coordinate quantization. The host supplies the output
  cloud already built.
- Sorting of arbitrary-length unsorted data with repeated passes. The merge
  of already sorted streams is built.
- Temporal layer fusion control.
- The DRAM itself. It is a port-level interface, with a behavioural model
  in `tb/dram_model.sv`.

## Simulating

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=… failures=…` and has a watchdog. For example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/pointacc_pkg.sv tb/tb_pointacc_top.sv \
          --top-module tb_pointacc_top -Mdir obj && obj/Vtb_pointacc_top
```

The end-to-end testbenches:

- `tb_pointacc_top` runs at reduced size (N = 8, 4 × 4 array). It runs:
  - sparse 3 × 3 × 3 convolutions through the whole chain, checked against a
    brute-force convolution;
  - dense layers;
  - kNN and ball query;
  - FPS.

  It counts every mechanism (MPU stall, FIFO full, cache hit and miss,
  weight load, prefetch, release) and fails if any never happens.
- `tb_pointacc_top_full` uses all default sizes. It runs one 300-point
  sparse convolution layer (64 → 64 channels) and one dense layer, and
  checks all 600 output rows.

  In one run the sparse layer took 9 908 cycles, the dense layer 1 703, and
  build plus run about 7 minutes.

Lower-level testbenches check the following against independent reference
models:

- the merge forwarding loop, including the published 8-point example and
  the cycle count;
- the intersection compaction;
- the sorter and merger networks;
- the cache and MIR modes;
- the array latency.

Synthesis of the full-size top (4096 multipliers and the sorting networks)
is slow. Every module also lints and simulates cleanly at the reduced sizes.
