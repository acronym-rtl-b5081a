# ACRONYM search engine — SystemVerilog RTL

ACRONYM searches a vector database for approximate nearest neighbours while
the database is being updated. Every vector is turned into a 256-bit binary
code by a fixed random ±1 projection followed by a sign. Nearness then means
Hamming distance between codes. The search runs in two stages:

1. **Coarse stage.** The first 128 bits of every stored code sit in a large
   content-addressable memory (CAM). A query's 128-bit coarse code is compared
   with all stored rows at once, and the rows closest to it form a *pool* of
   candidates.
2. **Refinement stage.** The other 128 bits of each pool candidate are fetched
   from a refinement memory and written into a small second CAM. That CAM is
   searched with the query's refinement code, and its closest rows are the
   result.

Nothing is sorted anywhere. Both CAMs pick their winners by **time**: each
row's matchline flips after a delay that grows with the row's Hamming
distance, and the outputs are latched at a programmable moment. The
projection does not depend on the data, so items can be inserted and deleted
at any time without rebuilding an index. Searches continue during updates;
only the array unit being written is hidden from them.

This RTL models one search module at its published size (2,097,152 items)
and the scale-out system that puts several modules behind one global
controller and merge.

## Time-latched top-k selection

This is the central mechanism, and the part that is easiest to get wrong.

In silicon, each CAM row's matchline is precharged when a query is applied.
It then discharges, and an inverter turns the falling voltage into a rising
digital output. A row whose code is closer to the query rises earlier. This
design follows the convention that distance *d* gives a rise at cycle *d*+1
after the search pulse (`TSTEP` cycles per distance step, default 1), so
distances 0, 1, 2 rise at cycles 1, 2, 3. The published description contains
one sentence saying the opposite (more mismatches, faster discharge). Its
timing figure and the rest of its text say smaller distances come first, and
that is what is built.

A latch counter starts with the search and pulses after `latch_time` cycles.
At that pulse every array unit captures its matchline outputs. The captured
multi-hot vector holds exactly the rows with

    valid  and  d * TSTEP < latch_time

The latch time therefore sets the pool size only approximately, and the host
can change it at any time (`OP_LATCH`). The refinement CAM works the same way
with its own latch time. Both default to 40 cycles. With 128-bit codes, a
random pair of codes is about 64 bits apart, so 40 keeps only clearly close
items.

`cam_array` is a behavioural model of the analog array. It stores the rows,
computes each row's distance in the cycle of the search pulse, and raises
`ml_out[r]` once the elapsed time exceeds `d * TSTEP`. Two edge cases:

- Deleted rows and rows never written have `valid = 0` and never rise.
- A row written during a search, or in the very cycle the search starts, is
  given the largest distance. It can never be a candidate of that search with
  a code it did not have when the search began.

## Hierarchy and item addresses

| Level | Contents | Header it adds |
|---|---|---|
| Array unit (AU, `cam_au`) | 128×128 CAM array + sparse encoder | 7-bit row index |
| Bank unit (BU, `bank_unit`) | 256 AUs (16×16) + address wrapper | 8-bit AU number |
| Coarse CAM unit (`coarse_cam_unit`) | 64 BUs (8×8) + latch counter + address wrapper | 6-bit BU number |

After the latch, each AU's **sparse encoder** emits the index of each
captured 1, lowest first, one per cycle. An **address wrapper** merges its
inputs round robin, one per cycle, and prefixes the source number. A
candidate therefore leaves the coarse unit as the 21-bit address
`{BU[5:0], AU[7:0], row[6:0]}`.

The refinement memory has exactly the same shape: a bank per BU, a block per
AU, a word per row. The coarse address is used directly as the memory
address, with no translation table. `mem_addr_decoder` splits it into one-hot
BU and AU selects plus the row.

At full size the coarse CAM holds 2,097,152 × 128 bits (32 MB), and so does
the refinement memory.

## Data path of one module (`acronym_top`)

```
host cmd ─► bus_if ─► query_buffer ─► encoder ─► FIFO ─► coarse_cam_unit ─► FIFO ─► refine_mem ─► refine_cam_unit ─► index buffer ─► results
               │                                              ▲                          ▲
               └────────────► update_ctrl (insert/delete queues, AU lock) ───────────────┘
```

**Encoder.** A 64×64 weight-stationary systolic array of XOR-and-accumulate
processing elements (`xac_pe`). A weight of +1 is stored as 0 and −1 as 1.
Each PE adds `q XOR w` plus `w` as a carry-in to the partial sum. A −1 weight
therefore adds −q, which is two's complement, with no multiplier.

The array is 64×64, but the projection is 128 dimensions by 256 code bits.
The encoder covers it in 4 code tiles × 2 dimension tiles:

- Each tile's weights are loaded row by row (64 cycles).
- A batch of up to 32 queries is streamed through the array, skewed.
- A bottom accumulator adds the dimension tiles.
- The sign stage turns each sum into a code bit: 1 if the sum ≥ 0.

A batch of *n* queries takes `4·2·(2·64 + 64 + n) + 4` cycles.

**Search controller** (`search_ctrl`). It runs one query at a time: coarse
search, collection of its refinement codes, refinement search, then an
end-of-query word. Refinement starts only when the coarse pool has been
fully emitted and no memory read is still in flight.

**Buffers:**
- The encoded-query FIFO decouples the encoder from the search.
- The address FIFO absorbs back-pressure from the slower refinement memory.
  The memory model accepts one read every `READ_II` cycles and answers after
  `READ_LAT` cycles.
- The index buffer holds result addresses until the host takes them.

**Refinement CAM** (`refine_cam_unit`). 64 AUs of 128 rows, which holds 8,192
candidates. A tag memory remembers each row's item address. Candidates beyond
the capacity are dropped and flagged as overflow, so the result is then a
subset.

**Results.** For each query, in order, the module sends zero or more item
addresses and then one word with `out_eoq = 1`.

## Updates during search (`update_ctrl`)

Insertions (full 256-bit codes) and deletions (item addresses) enter two
queues. Deletions are served first: each one is a single write that clears
the row's valid bit in the CAM. For insertions, the controller picks one
array unit:

- the first empty AU, if there is one;
- otherwise the AU with the most free rows (free rows only arise from
  deletions).

It locks that AU and writes up to 8 queued items into it, each with a write
latency of `WR_LAT` cycles. The CAM row and the refinement word are written
together, and the new address is acknowledged to the host.

While an AU is locked, its sparse encoder captures zeros at the latch, so it
contributes nothing to searches. All other AUs keep serving queries. An
occupancy bitmap per AU is the bookkeeping. When every row is full, an
insertion is dropped and `ins_drop` pulses.

## Scale-out (`acronym_system`, `global_merge`)

Several modules each hold part of the database. The global controller:

- broadcasts weights, queries and latch times to every module, and raises
  `cmd_ready` once the slowest module has taken the command;
- routes code, insert and delete commands to the module named by `cmd_mod`,
  so the host decides where items live.

The global merge interleaves the modules' results, prefixing each with the
module number. It sends one end-of-query word once every module has
finished the query. The published example shows 12 modules. The default here
is 2 (see *Sizes* below).

## Host commands (`acronym_pkg::bus_cmd_t`: `op`, 24-bit `addr`, 64-bit `data`)

| `op` | meaning |
|---|---|
| `OP_WEIGHT` | encoder weight word `addr` = ((code tile · 2) + dim tile) · 64 + array row; bit *j* = weight of array column *j* (1 = −1) |
| `OP_QUERY` | one INT16 query element in `data[15:0]`; 128 elements make a query |
| `OP_CODE` | 64-bit chunk `addr` of the code to insert next |
| `OP_INSERT` | queue the assembled code for insertion |
| `OP_DELETE` | delete the item at address `addr` |
| `OP_LATCH` | coarse latch time `data[15:0]`, refinement latch time `data[31:16]` |

## Sizes

All parameters default to the published values:

- 64 BUs × 256 AUs × 128 rows;
- 128 + 128 code bits;
- 128 dimensions of INT16;
- a 64×64 encoder array.

The one exception is `N_MOD` of `acronym_system`, which defaults to 2
instead of 12. Verilator needs about 2.9 GB to elaborate one full-size
module, and more than twice that for two, so 12 modules would exceed 32 GB.

The values the publication does not give are this design's own choices:

| Parameter | Value |
|---|---|
| encoder batch | 32 |
| FIFO depths | 16 / 32 / 64 |
| refinement CAM size | 8,192 rows |
| memory read | 1 per 2 cycles, 4-cycle latency |
| update batch | 8 |
| write latency | 8 cycles |
| default latch times | 40 |

At the default size, one module holds SIFT1M, GloVe (1.18M items, 100
dimensions, padded) and the 1M-item dynamic-update experiment:

- SIFT10M and DEEP need 5 modules.
- SIFT100M needs 48.
- Yandex TTI's 200 dimensions need `DIM = 200`.
- A pool of 5,000 candidates fits in the refinement CAM.

The cycle-level throughput is well below the published 8 million queries
per second, for two reasons:

- The encoder needs about 56 cycles per query.
- Each query's pool is fetched at one candidate per 2 cycles.

The published figure comes from a system model with HBM, not from a
cycle-level design.

## Where this RTL departs from the published design

- **One clock.** The published design mentions separate clock domains for the
  encoder and the CAM unit. Here everything runs on one clock, and the FIFOs
  are synchronous.
- **Refinement memory.** The published design uses HBM. Here it is an
  on-chip array with a configurable slow read port.
- **Analog CAM.** The CAM cells and matchline sensing are analog. They are
  represented by the behavioural `cam_array`, with one cycle per distance
  step.
- **No wear levelling.** The periodic logical-to-physical remapping of AUs
  against write hotspots is not built. The publication gives neither the
  period nor the mapping scheme.
- **Encoder per module.** In the scale-out figure the global controller
  receives an already encoded query. Here each module keeps its own encoder
  and encodes the broadcast raw query, which gives the same codes.
- **Own choices where the publication is silent:**
  - the end-of-query word;
  - round-robin arbitration in the address wrappers and the merge;
  - the AU allocation scan (one AU per cycle);
  - serving deletions before insertions;
  - the command set;
  - treating sign(0) as bit 1.

## Verification

Every module has a self-checking testbench, `tb/tb_<module>.sv`. Each one
compares against a model written in the testbench, prints
`TB_RESULT checks=N failures=M` and has a watchdog. To run one with plain
verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/acronym_pkg.sv tb/tb_encoder.sv --top-module tb_encoder
./obj_dir/Vtb_encoder
```

Notable checks:

- **`tb_cam_array`** reproduces the eight-row example of the published
  timing figure, then checks random arrays against the latch rule for every
  latch time.
- **`tb_encoder`** checks codes against a software projection and checks the
  batch latency formula, on a reduced 4×4 array.
- **`tb_acronym_top`** runs one reduced module end to end: 2 BUs × 2 AUs ×
  16 rows, 16 + 16 bits, 6-dimension queries. Its model of the database
  computes every expected result. It also counts that each mechanism
  happened:
  - multi-query encoder batches;
  - address-FIFO and memory back-pressure;
  - refinement overflow;
  - a search latched while an AU is locked;
  - batched insertion, deletion and dropped insertion.
- **`tb_acronym_system`** does the same for two such modules behind the
  global merge. It also requires a broadcast held by a slower module and an
  end-of-query word held for the other module.

The largest configuration simulated end to end is the 2-module reduced
system. The full-size module elaborates, but a simulation binary of it
needed more than 8 GB to compile and was not run. There is therefore no
full-size simulation.
