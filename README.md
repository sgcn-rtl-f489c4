# SGCN accelerator RTL: a GCN layer engine that works on compressed-sparse features

Deep graph convolutional networks with residual connections produce intermediate
feature matrices in which half or more of the values are zero after ReLU. A
conventional GCN accelerator reads and writes those matrices densely, so most of
its memory traffic moves zeros. This design keeps the features compressed in
DRAM, in a format built for cacheline-granular access:

- the aggregation phase reads only the cachelines that hold non-zeros;
- the combination phase writes its output directly in that compressed format.

One layer computes

    S(l+1) = A~ . X(l) . W(l) + S(l)        (residual, pre-activation)
    X(l+1) = ReLU(S(l+1))                   (stored compressed)

In this:

- A~ is the normalised adjacency matrix, held as CSR.
- X is the sparse feature matrix.
- W is the layer's dense 256 x 256 weight matrix.
- S is the dense residual stream.

The RTL is written in SystemVerilog-2017 and is synthesizable, apart from the DRAM model in `tb/`.

## 1. The feature format: sliced, in-place, bitmap-indexed CSR

Every feature row (256 values) is cut into **unit slices** of `C = 96`
elements. The last slice of a row is short, holding only 64 elements.

**Fixed home for each slice.** Each (vertex, slice) pair owns a fixed region of
`SLICE_LINES = ceil((ceil(C/32) + C) / 16)` 64-byte cachelines. That is 7 lines,
or 448 bytes, when C = 96. The region's address is a product:

    addr(v, s) = base + ((v * NSL + s) * SLICE_LINES) * 64        NSL = ceil(256 / C) = 3

No row-pointer array is needed. Any slice of any vertex can be reached directly,
which is what lets several engines work on different rows and slices in parallel.

**Inside a region:**

    word 0 .. BM-1   bitmap, BM = ceil(C/32) = 3 words; bit i of the bitmap
                     (bit i%32 of word i/32) is 1 iff element i is non-zero
    word BM ..       the non-zero values, in element order, packed
    rest             unused, never read or written

**Access rule.**
- A reader fetches line 0 first and counts the bitmap's ones. It then fetches
  `ceil((BM + nnz) / 16)` lines in total.
- A slice of 96 elements at 50 % sparsity therefore costs 4 lines instead of 6.
- An all-zero slice costs one line.
- The writer likewise writes only the used lines.

The package `sgcn_pkg` holds these rules as functions: `bm_words`, `slice_lines`
and `used_lines`.

Values (features and weights) are 32-bit two's-complement fixed point. The
split is Q16.16, and a product is `(a*b) >>> 16`, truncated to 32 bits. Sums
wrap modulo 2^32, so results do not depend on the order of accumulation, and
the testbenches compare bit-exactly.

## 2. Structure

    sgcn_top
    |-- layer controller        start -> invalidate cache, load W, run row tiles -> done
    |-- global_cache            512 KB, 16-way, LRU, shared by all feature readers
    |-- mem_arbiter  (x2)       feature reads -> cache; all DRAM reads -> one tagged port
    |-- write_arbiter           S(l+1) and X(l+1) writes -> one DRAM write port
    `-- 8 x engine pair
        |-- aggregation_engine
        |   |-- sac_scheduler       strips of 32 rows, interleaved across engines
        |   |-- graph_reader        CSR row pointers / column indices / edge values
        |   |-- feature_reader      fetches a neighbour's slice, only used lines
        |   `-- sparse_aggregator   16 multipliers, prefix sum, shuffle, accumulators
        |       `-- prefix_sum
        `-- combination_engine
            |-- input feature buffer  2 banks x 32 rows x 256 values
            |-- weight buffer         all of W(l), 256 x 256
            |-- systolic_array        32 x 32, output stationary, preset with S(l)
            |   `-- systolic_pe
            `-- compressor            ReLU + one BEICSR entry per array row

The DRAM is not part of the design. `sgcn_top` exposes:

- a tagged cacheline read port;
- a cacheline write port.

`tb/hbm_model.sv` models the DRAM for simulation.

## 3. How a layer runs

1. **Start.** A `start` pulse does three things:
   - it clears the cache's valid bits, because the previous layer wrote X around the cache;
   - it tells every combination engine to load W(l) into its weight buffer (4096 lines each);
   - it then walks the vertex range in row tiles of `tile_rows` vertices.
2. **Strips.** Within a tile, the rows form strips of 32. Engine e takes strips
   e, e+8, e+16 and so on. Neighbouring strips are aggregated at the same time by
   different engines. Because their neighbourhoods overlap, they share lines in
   the global cache.
3. **Aggregation, per strip.**
   - For each slice s (outer loop) and each vertex of the strip (inner loop), the
     accumulators are cleared.
   - The graph reader streams the vertex's edges.
   - For every edge (u, w), the feature reader fetches the used lines of slice s of u.
   - The aggregator adds `w * x` into the 96 accumulators.
   - The finished dense slice goes into the input feature buffer.
4. **Hand-over.** When all slices of all rows are in, the strip is handed to the
   combination engine on the current buffer bank. The aggregation engine then
   moves to the other bank. If that bank is still being combined, the engine
   waits; this wait is counted as a bank stall.
5. **Combination, per strip and per 32-column block of the output:**
   - read the 32 x 32 residual block S(l) and preset the array accumulators with it;
   - stream the strip's 256 aggregated features and the block's W columns through
     the array for 256 + 32 + 32 - 2 cycles;
   - drain the 32 results per row into the compressor;
   - write the dense S(l+1) block.
6. **Compression.** The compressor applies ReLU and keeps, per row, a bitmap and a
   packed value list for the current slice. After C values, or at the end of the
   row, it writes the used lines of every row's slice and starts again.
7. **Done.** When every engine has run out of strips and every combination
   engine is idle, the next tile starts. After the last tile, `done` rises.

## 4. The sparse aggregator (the part that makes compressed reads pay)

One cacheline of a neighbour's slice arrives per cycle, with its index inside
the slice. In the same cycle:

- 16 multipliers scale all 16 words of the line by the edge weight;
- the bitmap goes through an inclusive prefix sum. On line 0 the bitmap is taken
  from the line itself; on later lines a copy of it is held in a register.

For element p with bit p set, the value sits at word `BM + prefix(p) - 1` of the
slice. That word is in line `(BM + prefix(p) - 1) / 16`, at word `% 16`.
Accumulator p adds the product at that word when the line index matches.
Accumulators of zero elements are never touched.

A slice with k non-zeros therefore takes `ceil((BM+k)/16)` cycles, plus one
cycle per edge for the pipeline. `tb_sparse_aggregator` checks that count. The
prefix sum is a Kogge-Stone scan of `log2(C)` levels.

## 5. The combination engine's data movement

The array is output stationary. PE (i, j) holds the output of strip row i and
output column j. The engine's control is as follows:

- **Preset.** `load` sets every accumulator to the residual S(l). The residual
  addition therefore costs nothing.
- **Skew.** Row i of the aggregated features and column j of W are fed with a
  delay of i (or j) cycles. The delay lines are inside the array.
- **Compute.** `en` must stay high for K + ROWS + COLS - 2 cycles, after which
  all K products are in.
- **Drain.** `shift` moves every row one PE to the right, so the row's outputs
  leave at column COLS-1 from j = COLS-1 down to 0.
- **Column mirroring.** The engine feeds array column j with W column
  `cb*32 + (31 - j)`. The compressor therefore receives each row's features in
  ascending order, which the bitmap's element order needs.
- **Write-out.** While the compressor takes one value per row per cycle, the
  pre-activation values are collected and then written densely as S(l+1).

## 6. Interfaces and timing

| module | handshake | timing |
|---|---|---|
| `sgcn_top` | `start` pulse, `done` level; DRAM read: valid/ready request with tag, response strobe with tag (any order); DRAM write: valid/ready | one layer per start |
| `global_cache` | valid/ready request with tag, response strobe | hit: response one clock after the lookup cycle; miss: one DRAM round trip more; blocking |
| `mem_arbiter` | N valid/ready requesters, round-robin, tag = requester index | combinational grant |
| `graph_reader` | command valid/ready, edge valid/ready | one line request in flight; a one-line buffer per CSR array |
| `feature_reader` | edge valid/ready in, line strobe out | one line request in flight |
| `sparse_aggregator` | line strobe, no back-pressure | one line per cycle |
| `systolic_array` | `load`, `en`, `shift` | K+R+C-2 enable cycles, COLS shifts to drain |
| `compressor` | `start`; value valid/ready per row group; line write valid/ready | input stalls while a slice is being flushed |

All flip-flops use an active-low asynchronous reset, `rst_n`. The RAM-like arrays
have no reset and are always written before they are read:

- the cache data, tags and ages;
- the weight buffer;
- the input buffer.

## 7. Parameters

| parameter | default | where it comes from |
|---|---|---|
| `NUM_ENGINES` | 8 | 8 aggregation and 8 combination engines |
| `ROWS`, `COLS` | 32, 32 | systolic array size; also the strip height |
| `FEAT` | 256 | hidden feature width of the evaluated networks |
| `C` | 96 | unit slice size |
| `CACHE_KB`, `CACHE_WAYS` | 512, 16 | global cache; LRU |
| `TAG_W` | 8 | own choice, enough for 1 + 2*8 requesters |

`COLS` must be a multiple of 16, and `FEAT` a multiple of `COLS`. `CACHE_KB*16/CACHE_WAYS`
must be a power of two.

## 8. Where this RTL departs from, or adds to, the published design

**Taken from the published design:**
- the BEICSR idea, with the bitmap embedded at the head of each fixed-size unit slice;
- C = 96;
- the aggregation pipeline of multipliers, prefix sum, shuffle and accumulation register;
- fetching further lines only when non-zeros remain;
- the compressor, with one entry per array row, a global counter, ReLU, a non-zero test, counting, and a flush per unit slice;
- presetting the array with S for the residual;
- strips of 32 interleaved across engines;
- the engine counts, array size and cache geometry.

**Own choices, made where the description is silent:**
- Q16.16 fixed point;
- the exact memory map and the bit order of the bitmap;
- CSR with separate pointer, index and value arrays;
- one request in flight per reader;
- a blocking, read-allocate cache with exact LRU, invalidated at each layer;
- a two-bank input buffer and a weight buffer that holds all of W;
- slice-outer/vertex-inner aggregation order;
- round-robin arbitration;
- a single DRAM read port and a single DRAM write port at the top;
- layer sequencing by the host, one `start` per layer.

**Not built:**
- the optional first-layer variant, which combines CSR input features on the
  aggregation engine;
- input layers wider than 256 features. The design computes 256 -> 256 layers
  only, so a network's input layer (500 to 61278 features in the usual benchmark
  graphs) must be handled outside or split by the host.

**Performance modelling** is out of scope. The RTL is functionally exact, but its
cache is blocking and every reader keeps only one request in flight. It is not
tuned to reach the published throughput.

## 9. Simulating

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<m>`, and each has a watchdog. Build and run one
with, for example:

    verilator --binary --timing --assert -Irtl -Itb rtl/sgcn_pkg.sv tb/tb_sgcn_top.sv \
              -y rtl -y tb --top-module tb_sgcn_top -Mdir obj_top -o sim
    ./obj_top/sim

**The end-to-end test** is `tb_sgcn_top`. It runs one full layer on a reduced
instance:

- 2 engines, 4 x 16 arrays, 32 features, C = 20;
- a 1 KB 2-way cache;
- a 34-vertex graph in two row tiles.

It compares every word of S(l+1) and the decoded X(l+1) with a reference model.
It counts the design's mechanisms and fails if any never occurred:

- cache hits and misses;
- multi-line slice fetches;
- vertices without edges;
- bank stalls;
- ReLU zeros;
- partial strips;
- more than one tile.

**The full-size test** is `tb_sgcn_top_full`. It runs the same test with the top
at its default parameters on a 70-vertex graph. Its simulation takes about 12 s,
after several minutes of C++ compilation.

It currently **fails**. The first row tile, vertices 0-63, matches the reference
exactly. The second tile, vertices 64-69, is never processed: only 2 strips
complete instead of 3, and S(l+1) stays zero for those vertices. With only one
strip per engine, no bank stall occurs either. The reduced test runs two tiles
correctly, so the defect shows only at the default sizes. Its cause is still
open; the layer controller's tile hand-over and the strip scheduler's restart
are the first places to look. The block testbenches use reduced
sizes where the defaults would only slow them down.

Each testbench was also run against a copy of its block with one deliberate
defect, to show that it detects the defect.

## 10. Tool notes

Verilator lint reports the following warnings. All of them are deliberate or harmless:

- **Unused low address bits**: line addresses whose byte offset is dropped.
- **Unused upper bits** of loop counters in the arbiters.
- **An unconnected `nnz` output** of the aggregator: it is kept for debug and
  statistics, but not used at the top.
- **Order-of-evaluation notice** in the prefix-sum scan. The scan is written
  level by level in one `always_comb`.
- **Mixed synchronous and asynchronous use of `rst_n`**. The assertions use it
  as their disable condition.
