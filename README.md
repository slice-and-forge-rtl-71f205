# Slice-and-Forge: a GCN accelerator that shapes its working set to its cache

A graph convolutional network (GCN) layer computes `O = ReLU(A · X · W)`.
- `A` is the sparse adjacency matrix of a graph with millions of vertices.
- `X` holds one feature vector per vertex.
- `W` is a small dense weight matrix.

The dense product `Y = X·W` (*combination*) is easy to accelerate. The sparse product `A·Y` (*aggregation*) is not. Each output row gathers the feature rows of all its neighbours. Those rows are scattered over a matrix of several gigabytes, so an on-chip cache of a few megabytes thrashes.

This design attacks that in two ways.

1. **Feature slicing.** The feature matrix is cut column-wise into 64-byte slices, 16 words of 32 bits each. The whole aggregation then runs once per slice, B_F = |F|/16 times in all. One pass only touches `|V| × 64 B` of features instead of `|V| × |F| × 4 B`. That is a working set B_F times smaller, and far more of it stays in the cache. The price is that the topology is streamed B_F times. Topology is read sequentially, so that costs bandwidth but no misses.
2. **Automatic Tile Morphing (ATM).** Inside each pass the adjacency matrix can also be cut into vertical strips (vertex tiling). Inside a strip, only the source vertices of that strip are touched, which shrinks the working set further. Each extra strip costs another read of the row pointers and another read-modify-write of the partial outputs.
   - The best strip layout depends on the graph, the cache and the degree distribution.
   - Because every slice pass walks the graph in exactly the same pattern, each pass is a free experiment.
   - A small controller measures each pass: cycles, plus cache misses per column region. It then reshapes the strips for the next pass. First it halves or merges all strips at once (coarse). Then it splits the worst strip or joins the best one with a neighbour (fine). Finally it settles.

The RTL here implements the multi-engine configuration:
- 8 combination engines, each a 32×32 systolic array;
- 8 aggregation engines, each a 16-lane SIMD core;
- a shared 16 MB, 16-way LRU global cache of 64-byte lines;
- one line-wide port to off-chip memory (HBM2 in the reference system).

Arithmetic is 32-bit fixed point, Q16.16. The clock target is 1 GHz.

## Block structure

```
                      +--------------------------- snf_top ----------------------------+
 host: start, sizes,  |  sequencer: IDLE -> COMB -> AGG -> FLUSH -> IDLE (done)        |
 base addresses,      |                                                                |
 row ranges  ------>  |  combination_engine x8          aggregation_engine x8          |
                      |   X loader --DRAM               vertex_prefetch --DRAM         |
                      |   property buffer (2 banks)       | FIFO                       |
                      |   weight reader --cache         edge_prefetch   --DRAM         |
                      |   weight buffer (2 banks)         | FIFO                       |
                      |   32x32 systolic array          feature_reader  --cache        |
                      |   result writer --cache           | FIFO        \ stats        |
                      |                                 simd_core       --cache        |
                      |                                 config_controller (ATM)        |
                      |                                                                |
                      |   mem_arbiter (16 ports) --> global_cache (16 MB, 16-way LRU)  |
                      |   mem_arbiter (17 ports: cache, 8 X loaders, 8 topology) ----------> DRAM port
                      +----------------------------------------------------------------+
```

All memory traffic uses one request/response interface (`mem_req_t`, `mem_rsp_t` in `snf_pkg`):
- A request carries a 34-bit **line** address, a write enable and a 512-bit line.
- Every request, writes included, gets exactly one response, in order.
- The response carries the read line and, from the cache, a hit flag.
- `mem_arbiter` is a round-robin arbiter with one outstanding request. It is used at every point where two or more units share a port.

## One layer, end to end

The host loads X, W and the graph into DRAM. It then sets the widths, base addresses and the row range of every engine, and pulses `start` once `ready` is high. `ready` goes high when the cache has cleared its tags after reset.

1. **Combination.** Each combination engine computes `Y = X·W` for its rows, in blocks of 32 rows × 32 output columns.
   - X rows come from DRAM into the property buffer.
   - The 32 columns of W come through the global cache into the weight buffer.
   - Both buffers have two banks, so the next block loads while the array computes.
   - Results are written to the global cache at `y_base`. They are still mostly resident when aggregation starts.
2. **Aggregation.** Each aggregation engine computes `O = ReLU(A·Y)` for its rows. It runs `B_F = f_out/16` rounds, one per feature slice, and each round uses the tiling chosen by its ATM controller.
3. **Flush.** The cache writes all dirty lines back to DRAM. Then `done` pulses, and O (and Y) can be read from DRAM.

The row ranges of the engines are inputs. A balanced split (for example, equal edge counts per aggregation engine) is left to the host. An aggregation engine with an empty range is skipped.

## Data layout in memory

All bases are line addresses (64-byte units).

| Data | Layout |
|---|---|
| X | row major, `f_in` words per row; line `x_base + r·f_in/16 + l` |
| W | row major, `f_out` words per row |
| Y | row major, `f_out` words per row; slice `s` of row `v` is line `y_base + v·B_F + s` |
| O | same layout as Y, at `out_base` |
| Row pointers | strip-indexed: word `rp[u][c]` at byte `64·rp_base + 4·(u·65 + c)`, c = 0..64 |
| Edges | 64-bit entries `{weight[63:32], source column[31:0]}`, byte `64·edge_base + 8·e` |

The vertex range is cut into 64 **unit columns** of `unit_rows = ceil(|V|/64)` vertices each. All tilings are made of whole unit columns.

The edges of row `u` are sorted by source column, and `rp[u][c]` is the index of its first edge whose source lies in unit column `c` or later. The strip covering unit columns `[c0, c1)` of row `u` is then the edge range `[rp[u][c0], rp[u][c1])`. This is an ordinary CSR edge array with a wider row pointer table, so any tiling can be read without re-sorting. The table costs 65 words per vertex instead of one. That is this design's choice: the reference work does not say how tiled topology is stored.

Feature widths are padded:
- `f_in` to a multiple of 16, at most `K_MAX` (1024);
- `f_out` to a multiple of 32, the array width, and at most 4080 (B_F is an 8-bit count).

## Aggregation engine

The four stages are decoupled by 4-entry FIFOs.

- **vertex_prefetch** starts a round when the controller offers a tiling (`cfg_valid`) and pulses `round_start`.
  - It walks the strips left to right and, inside each strip, the engine's rows.
  - For each (row, strip) it reads two row pointers and passes on the edge range, with flags for the first strip, the last strip and the last row of the round.
  - The slice number advances from round to round.
- **edge_prefetch** turns each range into one token per edge: row, source vertex and weight. It keeps the last edge line it read. After each range it emits an end-of-row token.
- **feature_reader** reads slice `s` of each source vertex through the global cache and attaches the line to the token.
  - It reports every access to the controller, with the access's unit column (`v / unit_rows`, computed with 63 comparators) and whether it missed.
  - End-of-row tokens pass without a read.
- **simd_core** multiplies the 16 words by the weight and accumulates, one edge per cycle. At an end-of-row token it writes the row's partial output:
  - on the first strip, it writes the accumulator as is;
  - on later strips, it first reads back the earlier partial sum from the cache and adds it;
  - on the last strip, it applies ReLU if `relu_en` is set.

  After the round's last write it pulses `round_end` to the controller.

The edge range is read only through the two prefetch units, straight from DRAM. Only features and outputs go through the cache, because only they are reused.

## Automatic Tile Morphing (config_controller)

This is the part that needs the most care.

**State.**
- For each of the 64 unit columns there is an access counter and a miss counter, fed by the feature reader.
- A cycle counter runs from `round_start` to `round_end`.
- The ATM status table holds two records, `round_opt` (the best round so far) and `round_cur` (the round just measured). Each record has a width array (64 entries), a miss-ratio array (64 entries, Q0.16), a cycle count and the index of the last strip changed.
- Registers hold the phase (COARSE/FINE) and the direction (HALVING/MERGING).
- The next-tile-width registers are read by the vertex prefetch.

**After each round.**
1. For every strip of `round_cur`, add up the access and miss counts of its unit columns. Divide them with a 48-step restoring divider to get the strip's miss ratio.
2. Compare `round_cur.cycles < round_opt.cycles`. If the current round is faster (the first round always is), `round_cur` becomes `round_opt`. The next step then depends on where the search stands:

| Situation | Next step |
|---|---|
| after the default round | coarse trial 1: halve every strip |
| after trial 1 | coarse trial 2: merge the *default* strips pairwise |
| after trial 2 | merging beat both others: keep MERGING; halving was best: keep HALVING from it; the default was best: go to FINE |
| any later step faster | repeat the same kind of step on the new `round_opt` |
| COARSE step slower | roll back to `round_opt`, enter FINE, direction HALVING |
| FINE HALVING slower | roll back, direction MERGING |
| FINE MERGING slower | settled: keep `round_opt` for all later rounds |

3. Build the next tiling from `round_opt`, one source strip per cycle:
   - COARSE HALVING splits every strip in two, so [32,32] becomes [16,16,16,16];
   - COARSE MERGING joins neighbours pairwise;
   - FINE HALVING splits the strip with the highest miss ratio;
   - FINE MERGING joins the strip with the lowest miss ratio and its right neighbour, or its left one if it is the last strip.
4. Raise `cfg_valid`. The vertex prefetch starts the next round.

A step that cannot be applied counts as a slower round. Two examples are halving when a strip is one unit column wide, and merging a single strip. Every layer starts from the default of 2 strips of 32 unit columns (`DEFAULT_BV`).

Three example runs of the controller's unit test, with round cycle counts chosen by the test:

```
A: [32,32] -> [16x4] -> merge trial [64] (slower, keep halving from [16x4])
   -> [8x8] -> [4x16] (slower, go FINE from [8x8])
   -> [4,4,8x7] -> [2,2,4,8x7] (slower, start merging from [4,4,8x7])
   -> [4,4,8,8,8,8,8,16] -> [4,4,8,8,8,8,24] (slower) -> settled on [4,4,8,8,8,8,8,16]
B: [32,32] -> [16x4] (slower) -> merge trial [64] (best; nothing left to merge)
   -> FINE: [32,32] (slower) -> settled on [64]
C: [32,32] -> [16x4] (slower) -> [64] (slower) -> FINE from [32,32]: [16,16,32] (slower)
   -> merge the last strip with its left one: [64] (slower) -> settled on [32,32]
```

**Where this departs from the reference description.**
- The reference decides from the counts up to the next-to-last strip, so the decision is hidden under the last strip. Here the decision starts after the round ends. It takes about `3·64 + 49·(number of strips)` cycles, during which the engine waits.
- The reference's pseudo-code also leaves out how the first direction is found, and stops at the first slower fine round. The order described above follows its prose:
  - in the coarse phase, measure one halving trial and one merging trial, then continue in the better direction;
  - in the fine phase, split the worst strips, then join the best ones.

## Combination engine

The combination engine has three concurrent processes:
- the X loader (DRAM → property buffer);
- the weight reader (cache → weight buffer);
- the compute/write process.

Each buffer is a `pingpong_buffer`: two banks of `K_MAX × 32` words. The producer fills one bank and commits it; the consumer reads the other and releases it.

The loop order is: 32-row blocks outer, then 32-column blocks of W. One X block is therefore reused for all column blocks, and a W block is re-read (mostly as cache hits) for every row block.

The array is output stationary.
- Row operands enter from the left and column operands from the top, both skewed by one cycle per row or column.
- Each PE computes `acc = (first ? 0 : acc) + a·b` (Q16.16, truncated).
- The block is complete `2N-1` cycles after the last k enters. The 32×32 result is then written as two lines per row.
- Rows beyond the engine's range in the last block are computed but not written.

## Global cache

The cache has 16 MB in 262,144 lines of 64 bytes, organised as 16 ways × 16,384 sets.

- **LRU.** It keeps true LRU as a 4-bit age per way.
- **Write policy.** It is write-back and write-allocate. A write miss allocates without reading DRAM, because all writes here are whole lines.
- **Blocking.** It handles one request at a time. A hit is answered 2 cycles after acceptance.
- **Misses.** A miss writes back a dirty victim, then fills from DRAM.
- **Reset.** After reset the tags are cleared one set per cycle (16,384 cycles); `init_done` then rises.
- **Flush.** `flush_req` writes every dirty line back.

A blocking cache is the largest simplification in the design. The reference accelerator keeps several feature reads in flight. Here the FIFOs keep the pipeline fed, but engines wait for each other at the cache arbiter. The hit/miss behaviour is unaffected, and that is what ATM measures. Absolute cycle counts are pessimistic.

## Interfaces and timing summary

| Signal | Behaviour |
|---|---|
| `start` | one-cycle pulse, accepted while `ready` |
| `done` | one-cycle pulse after the flush |
| `phase_now` | 0 idle, 1 combination, 2 aggregation, 3 flush |
| `atm_phase`, `atm_settled`, `atm_n_tiles` | per aggregation engine, for observation |
| DRAM port | `m_valid`/`m_ready` request handshake; `m_rsp_valid` one cycle per response; any latency |

Reset is asynchronous and active low. Handshake and range rules are checked by immediate assertions in the clocked blocks; these are disabled during reset.

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints `TB_RESULT checks=N failures=M` and has a cycle watchdog. `tb/dram_model.sv` is a behavioural memory for simulation only: a sparse array, fixed latency, one request at a time.

| Testbench | What it checks |
|---|---|
| `mem_arbiter_tb` | three random requesters; every response reaches its owner with the right data; grants rotate when all wait |
| `global_cache_tb` | 4 KB / 4-way cache against a reference LRU model (hit flag, data); hit latency 2; DRAM content after flush |
| `pingpong_buffer_tb` | both write shapes; every word read is the one written; one bank fills while the other is held |
| `systolic_array_tb` | full 32×32; random blocks against a reference product; latency 2N-1 |
| `combination_engine_tb` | two jobs (partial last block, rows outside the range untouched); overlap of loading and computing |
| `vertex_prefetch_tb` / `edge_prefetch_tb` | ranges, flags, line reuse, DRAM read counts |
| `feature_reader_tb` / `simd_core_tb` | addresses, lines, unit column and miss reports; multi-strip read-modify-write and ReLU |
| `config_controller_tb` | the three ATM runs shown above; the miss ratios of the first round |
| `aggregation_engine_tb` | random 128-vertex graph through a real cache; outputs against reference; ATM decisions, tile changes, hits, misses and read-backs all occur |
| `snf_top_tb` | whole layer, 2+2 engines, 16 KB cache; Y and O against reference. It counts 13 mechanisms and fails if any never occurs: the three phases, load/compute overlap, cache hits, misses, dirty evictions, contention at both arbiters, coarse and fine ATM decisions, settling, partial-output read-back. |
| `snf_workload_tb` | one layer per feature width of the evaluated graphs (100, 128, 256, 602; padded to 112/128, 128, 256, 608/608), back to back on one reduced top with `K_MAX` 1024, on 64-vertex graphs skewed like crawled social networks; Y and O against reference, cycles and ATM decisions per layer |
| `snf_top_full_tb` | the same layer on the top at its default parameters (8+8 engines, 16 MB cache) with a 256-vertex graph; about 5 minutes to build and 30 s to run |

To run one with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb \
    rtl/snf_pkg.sv tb/snf_top_tb.sv --top-module snf_top_tb -o sim
./obj_dir/sim
```

## Sizes and what fits

The default parameters are the reference configuration:
- 8 + 8 engines, N = 32, 16 MB / 16-way cache;
- `K_MAX = 1024`, which is this design's choice.

Of the seven large graphs the reference evaluates, all fit (their feature widths are simulated on scaled-down graphs by `snf_workload_tb`): Products, Citation, Pokec, YouTube, LiveJournal, Orkut and Reddit. Their widest features are 602 words, padded to 608. Vertex and edge counts fit in 32 bits. The whole memory image is a few GiB of the 1 TiB address space. The largest cost is the 65-word row pointer table, 1.2 GiB for LiveJournal.

The small citation graphs Cora (1433 features), Citeseer (3703) and Nell (61,278) have first layers wider than `K_MAX`. They need a larger `K_MAX`, or a K-split of the combination, which is not built. Pubmed (500) fits.

## Departures and omissions

- **Cache.** The global cache is blocking, with one outstanding miss.
- **ATM timing.** The ATM decision is taken after each round instead of being overlapped with the last strip.
- **Phase order.** Combination finishes for all rows before aggregation starts. There is no overlap of the two phases across engines.
- **Not built:**
  - the multi-chip extension (ring network interface, all-gather of outputs);
  - the small-scale single-engine configuration. It is the same RTL with `N_COMB = N_AGG = 1` and a 512 KB cache, but it was not simulated.
- **Off-chip memory.** It is a single port. HBM channels and banks are not modelled.
- **Synthesis.** At the default size the cache and the buffers are plain arrays. Generic synthesis turns them into flip-flops, which does not fit in workstation memory. A real implementation would substitute SRAM macros for `global_cache.data_mem` and the buffer banks.
