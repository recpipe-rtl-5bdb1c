# RPAccel: a multi-stage recommendation accelerator in SystemVerilog

This is synthesizable RTL for RPAccel, the accelerator proposed in *RecPipe: Co-designing Models and
Hardware to Jointly Optimize Recommendation Quality and Performance*. The RTL has self-checking
testbenches for verilator.

RPAccel ranks a query's candidate items with a pipeline of models:
- a light frontend model scores every item;
- a streaming top-k filter keeps the best items;
- a heavier backend model re-scores only those survivors.

The hardware for this pipeline has four parts:
- **A reconfigurable 128×128 weight-stationary systolic array.** It can be split into independent
  sub-arrays, so frontend and backend models (and several queries) run at the same time.
- **One top-k filtering unit per sub-array.** It bucketizes scores instead of sorting them.
- **A two-part embedding cache.** A static cache holds hot vectors for both stages. A look-ahead
  cache holds vectors fetched for queries in flight, including backend vectors prefetched while
  the frontend is still running.
- **An embedding gather unit.** It serves lookups from the caches or from DRAM.

## Files

| file | what it is |
|---|---|
| `rtl/rp_pkg.sv` | shared sizes, types, engine command and lookup request structs |
| `rtl/sa_pe.sv` | one MAC cell: `p_out <= p_in + w*a_in`, weight held in place |
| `rtl/sa_tile.sv` | 32×32 grid of cells, the unit by which the array is split |
| `rtl/reconfig_sa.sv` | 4×4 tiles with per-tile `join_left` / `join_up` muxes (fission) |
| `rtl/weight_sram.sv` | weight bank of one engine, one 128-byte weight row per word |
| `rtl/act_sram.sv` | lane-banked activation / dense-input bank, one narrow bank per array row |
| `rtl/mlp_engine.sv` | runs layers on one sub-array: weight load, skewed streaming, write-back, CTR stream |
| `rtl/ctr_sigmoid.sv` | piecewise-linear sigmoid producing an 8-bit CTR |
| `rtl/topk_filter.sv` | 16-bin streaming top-k filter with a 0.5 CTR threshold |
| `rtl/static_emb_cache.sv` | 12 MB hot-embedding cache, split equally between frontend and backend |
| `rtl/lookahead_emb_cache.sv` | 4 MB cache of fetched and prefetched vectors |
| `rtl/emb_gather.sv` | lookup unit: static cache, then look-ahead cache, then DRAM |
| `rtl/rpaccel.sv` | top level: array, 16 engines, 16 filters, gather unit and forwarding |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/tb_rpaccel.sv`, `tb/tb_rpaccel_full.sv`, `tb/rpaccel_flow.svh` | end-to-end test at reduced and at full size |
| `tb/dram_model.sv`, `tb/tb_pkg.sv` | behavioural DRAM (100-cycle latency) and its contents |

## How it works

### Array and fission

The 128×128 array is 16 tiles of 32×32 cells. Each tile takes inputs from one of two places:
- from its neighbour when joined: activations from the left (`join_left`), weights and partial sums from above (`join_up`);
- otherwise from its own engine.

Any rectangle of tiles can therefore act as one sub-array. The tiles inside a fused rectangle set
both join bits. The host chooses the split; in the paper a software scheduler does this. The split
can change between layers. The sub-array is owned by the engine of its top-left tile.

`rpaccel` works out, from the join bits, the following for each engine:
- the owner and the bottom edge of every tile;
- the engine's sub-array height and width;
- which tile outputs give its partial sums.

### Engines

There is one engine per tile (16 in total). Each engine has 256 KB of weight SRAM (2048 rows) and
256 KB of activation SRAM (2048 words), which adds up to the 8 MB of array SRAM.

The host drives an engine with `eng_cmd_t` commands:
- **`OP_LOAD_W`** shifts H weight rows into the sub-array. It takes H+1 cycles.
- **`OP_RUN`** streams `count` items through the sub-array. Lane r reads item t−r, which gives the
  skew. Column c of item m leaves the array in cycle m+H+c+1. The layer takes count+H+W cycles.
  Each output is then handled in one of three ways:
  - **Hidden layer:** ReLU, arithmetic shift, saturate to int8, then written to lane `o_lane+c` of
    word `o_base+m`. Writing each lane at its own address removes the skew.
  - **Accumulate:** added into, or stored in, a 32-bit accumulator memory (`acc_in` / `acc_out`).
    This lets a layer with more inputs than the sub-array has rows run as several passes.
  - **Final layer:** column 0 goes through the sigmoid and comes out as one CTR per cycle, tagged
    `item_base+m`, into the engine's top-k filter.

### Top-k filter

Each score falls into one of 16 equal CTR bins.
- Scores below 0.5 are counted but not stored.
- Stored ids go into a 4096-entry buffer kept as one linked list per bin.
- The filter keeps a counter for each bin.
- A drain for k walks the bins from the top until the counts reach k, then emits every id in those
  bins, one per cycle. The result is "at least top-k", as in the paper.

### Embedding path

A lookup names a line id, a stage (frontend or backend) and a destination (engine, word).
- The static cache's frontend or backend half is checked first, then the look-ahead cache.
- On a hit the line is written 2 cycles later.
- A miss reads DRAM, fills the look-ahead cache, then writes the line.
- A prefetch only fills the look-ahead cache.

### Forwarding

Top-k drains from all engines are merged onto `topn_*`, lowest engine first. The host writes them
to DRAM. For an engine with `fwd_en` set, each drained id also becomes a backend lookup for line
`fwd_emb_base + item`. This lookup is either a prefetch into the look-ahead cache or a direct
delivery into engine `fwd_dst_eng` at consecutive words.

The host splits a query into 4 sub-batches. Sub-batch s+1 runs on the frontend while the backend
ranks the survivors of sub-batch s.

### Timing summary

| operation | cycles |
|---|---|
| weight load | H+1 |
| layer over M items on an H×W sub-array | M+H+W |
| top-k filter input | one CTR per cycle |
| drain | one id per cycle |
| cache hit | 2 |
| DRAM miss | about 100 + 3 |

There is one clock (250 MHz in the paper) and an asynchronous active-low reset.

## Following the paper vs. own choices

**Taken from the paper:**
- 128×128 MACs;
- 8 MB of array SRAM;
- a weight-stationary array that splits into sub-arrays, with 32×32 granules as drawn in its Fig. 9;
- one top-k unit per sub-array, with 16 bins, a 0.5 threshold, "at least top-k" from the highest
  bins and one score per cycle;
- 12 MB static + 4 MB look-ahead cache, with the static cache split equally between stages;
- 128-byte lines;
- gather order: caches first, then DRAM into the look-ahead cache;
- ids from the host for the frontend and from the top-k filters for the backend;
- 4 sub-batches;
- DRAM latency of 100 cycles (testbench model).

**This design's own choices** (the paper does not give them):
- int8 operands and 32-bit accumulators;
- Q0.8 CTR and the piecewise-linear sigmoid;
- the join-bit fission scheme;
- one engine per tile, and the 256 KB + 256 KB split per engine;
- the command format and the accumulator memory for input-split layers;
- lane-banked activation memory;
- direct-mapped caches with full-id tags;
- the blocking gather unit;
- a linked-list id buffer inside the filter, rather than a region of weight SRAM as the paper says;
- the forwarding path from filters to the gather unit.

## Not built / limits

- **DLRM embedding pooling and the pairwise feature interaction.** Engines run dense layers on
  128-byte input lines, without bias. The host (or data layout) must provide the interaction
  vector.
- **The software scheduler, host CPU, PCIe and DRAM.** These are outside the design; their signals
  are ports. Only the DRAM has a behavioural model, in `tb/`.
- **More than 16 sub-arrays.** The smallest sub-array is 32×32, so RPAccel_{8,16} (24 sub-arrays)
  does not fit; {8,2} and {8,8} do.
- **Queries where more than 4096 ids pass the threshold.** Each filter holds 4096 ids; further ids
  are dropped and counted (`n_dropped`).
- **Concurrent gather lookups.** The gather unit serves one lookup at a time.

## Verification

Each block has a testbench that compares the block with values computed independently in the
testbench, and checks latencies where they are defined. Each testbench was also run against a
deliberately broken copy of its block, and every one of them failed there.

`tb_rpaccel` runs the whole design end to end with 2×2 tiles of 8×8 cells. It is a host program
(`rpaccel_flow.svh`) with two phases:
1. **Monolithic mode.** All tiles are fused; a one-layer model is scored and a top-k drain is checked.
2. **Multi-stage mode.** This phase runs three things at once:
   - a frontend sub-array ranks a 4-sub-batch query fed by cache and DRAM lookups;
   - its survivors are forwarded as backend prefetches;
   - a fused 2N×N backend sub-array re-ranks them from look-ahead hits, while a second frontend
     query runs on another tile.

Every filtered set is checked against a reference model. The testbench also counts each mechanism
and fails if any of them never happened:
- mode switches;
- static hits, look-ahead hits and DRAM misses;
- prefetches and forwarded ids;
- scores below the threshold;
- cycles where frontend and backend overlap;
- cycles with two frontend queries running at once;
- drain back-pressure.

`tb_rpaccel_full` runs the same flow on the top at its default parameters (128×128 array, full
memories). It takes about 7 minutes to build from scratch with verilator and a few seconds to run.
