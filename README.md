# Ironman-NMP: a near-memory engine for PCG-style oblivious transfer extension

Secure two-party machine learning consumes huge numbers of *correlated oblivious
transfers* (COTs): pairs of 128-bit values where the receiver holds
`r_i` and a choice bit, the sender holds `s_i`, and `r_i = s_i xor (bit_i · Δ)`
for a global sender secret `Δ`. Modern protocols (PCG-style OT extension, as
in Ferret) make these in bulk from two kernels:

* **SPCOT**: single-point COT built from GGM trees. A tree expands a root
  seed with a PRG into `ℓ` leaves. The receiver learns every leaf except
  the one at its secret position `α`, where it gets the leaf xor `Δ`. The
  kernel is compute bound: one PRG call per inner node.
* **LPN encoding**: each output row is the XOR of the 128-bit elements
  of a long vector that a fixed sparse matrix selects (10 per row). The
  kernel is memory bound, with random 16-byte reads all over a vector
  of hundreds of thousands of elements.

This RTL puts both kernels on the buffer chip of a DDR4 DIMM:

* The compute-bound SPCOT runs in a **DIMM module**: a fully pipelined
  ChaCha8 core plus a controller that serves as the sender's key
  generator or the receiver's message decoder.
* The memory-bound LPN runs in one **rank module** per rank. Each reads
  its own rank's DRAM through a memory-side cache.

The DIMM module XORs each LPN row sum with the SPCOT leaf of the same row and
streams out the final COT blocks. The host only sends instructions and reads
results.

The design follows the Ironman architecture (DIMM-NMP plus Rank-NMP, 4-ary
ChaCha8 GGM expansion, a hybrid tree-expansion schedule, a unified
sender/receiver unit, and sorted-index LPN with a memory-side cache). Where
the architecture description leaves details open, this implementation makes
its own choices; they are listed in the last sections.

## 1. One processing unit

```
 host (NMP instructions)                      DIMM.COT  Sender.key
        │                                         ▲          ▲
        ▼                                         │          │
 ┌──────────────────────── dimm_nmp ──────────────┴──────────┴───────┐
 │ Inst Queue ─┬─ SPCOT ops ─► unified_unit ◄──► ggm_expansion_unit   │
 │ (sync_fifo) │               (node_buffer,      (ChaCha8, 8 stages)  │
 │             │                xor_tree)  leaves                      │
 │             │                            ▼                          │
 │             │               dimm_xorsum_buffer ─► COT = leaf ⊕ sum  │
 │             └─ rank ops (by rank_id)     ▲        ▲                 │
 └─────────────────┬─────────────┬──────────┼────────┼─────────────────┘
          Rank.NMP.Inst    Rank.NMP.Inst  Rank.XorSum  Rank.XorSum
                   ▼             ▼          │        │
   ┌──── rank_nmp (rank 0) ─────┐  ┌──── rank_nmp (rank 1) ─────┐
   │ Inst Buffer → inst_decoder │  │            same            │
   │ → index_address_generator  │  └────────────────────────────┘
   │ → memory_side_cache        │
   │ → memory_interface_unit ◄──┼──► DDR4 C/A and DQ of the rank
   │ → rank_xorsum_buffer       │
   └────────────────────────────┘
```

`ironman_pu` is the top: one `dimm_nmp` and two `rank_nmp`. Its ports are:

* the instruction stream
* the COT output (four 128-bit lanes per cycle, each tagged with its row number)
* the sender key stream
* the C/A and DQ pins of both ranks

A system scales by using one PU per DIMM.

SPCOT and LPN are independent until the final XOR. The two halves of a row
therefore meet in `dimm_xorsum_buffer`, in whatever order they arrive:

* leaves arrive in GGM-schedule order
* row sums arrive in sorted-index order from two ranks at once

## 2. SPCOT: 4-ary GGM trees on one ChaCha8 pipeline

### 2.1 Expansion

A ChaCha8 call gives 512 bits, which is exactly four 128-bit children. The
trees are therefore 4-ary: a node at level `L` with seed `s` has children
`c0..c3` = the four 128-bit words of

```
ChaCha8( const[4] | s (4 words) | tag (4 words) | L | 0 | 0 | 0 )
```

Here `tag` is a batch-wide 128-bit value (OP_SET_TAG) and `L` is the parent's
level. The child depends only on `(s, tag, L)`, so sender and receiver agree
no matter in which order they expand nodes.

`chacha8_core` runs one round per pipeline stage: 8 stages, even stages
are column rounds and odd stages are diagonal rounds. The usual
input-state addition happens at the output. It accepts one call per
cycle, and results appear 8 cycles later. With `DEPTH` = 6 a tree has
4096 leaves and (4096−1)/3 = 1365 inner nodes.

### 2.2 Hybrid schedule (why the node buffer is a shared LIFO)

* **Depth-first** keeps storage at O(depth).
* **Breadth-first** gives independent work, but needs O(ℓ) storage.
* **Within one tree**, a child cannot be expanded until its parent
  returns from the 8-deep pipeline, so a single tree cannot fill it.

The unified unit therefore keeps the nodes of `TREES` = 4 trees in one
LIFO (`node_buffer`):

* it pops one node per cycle and issues it to ChaCha8
* when the four children return, it pushes the ones that are inner nodes
  together (breadth-first among siblings)
* it starts all four roots together

Depth-first order bounds the occupancy, and mixing trees keeps independent
work available.

At the default size the sender batch issues its 4 × 1365 = 5460 calls in
5487 cycles, so the pipeline is 99.5 % busy.

The LIFO holds 192 entries. An issue rule keeps it from overflowing: a
node is issued only if the stack has room for the children of every
expansion in flight. Nodes whose children are leaves push nothing, so they
may always go. The measured peak occupancy is 127.

### 2.3 Sender: key generation

For every tree, level `L` (1..DEPTH) and child position `j` (0..3), the
sender XORs together all level-`L` nodes in position `j`. This is
`K[L][j]`, the 4-ary form of the "even/odd sums" of a binary GGM tree.
`xor_tree` (2 inputs: one new node and the running sum) does the
accumulation as results come back.

A leaf key of `XOR(all leaves) xor Δ` is also formed. After all trees
finish, `DEPTH·4 + 1` keys per tree stream out on `key_*`, level 0 being
the leaf key. These keys are what the base OTs send to the receiver. The
sender's leaves go straight to the XorSum buffer.

### 2.4 Receiver: message decoding

Take `α`, written in base 4 as `a1 a2 … aDEPTH`. The receiver gets, through
(m−1)-out-of-m OT on the host side, the keys `K[L][j]` for every `j ≠ aL`.
It gets them as OP_KEY instructions.

It starts from level 1:

* the three nodes other than `a1` equal their keys
* it never learns node `a1`

In general, when every known node of level `L−1` has been expanded, the
receiver's own partial sum for position `j` of level `L` lacks exactly one
term. That term is the child `j` of the unknown node `α_1..α_{L−1}`.

The recovery step writes `K[L][j] xor sum[L][j]` for the three positions
`j ≠ aL` and pushes the recovered nodes onto the stack as the siblings of
the path. This happens `DEPTH` times per tree.

Finally, leaf `α` is `leafkey xor XOR(all other leaves)`. That equals the
sender's leaf xor `Δ`, which is the COT correlation.

Recovery and the α leaf share the datapath with returning expansion results:

* they use cycles in which no result arrives
* while one is pending, node issue pauses (a *recovery stall*; typically
  one cycle each)

Sender and receiver use the same unit; `OP_RUN.role` picks the behaviour.

## 3. LPN: sorted indices, a memory-side cache and per-row XOR

### 3.1 Data in DRAM

Each rank holds:

* its copy of the 128-bit LPN input vector: four elements per 64-byte
  line, element `c` in line `vec_base + c/4`, lane `c mod 4`
* for each job, an array of 64-bit index pairs, eight per line:
  `col` in bits [31:0], local `row` in bits [63:32]

A job covers `BLOCK_ROWS` = 1024 rows of the LPN matrix. The host sorts
each block's pairs offline so that consecutive pairs touch nearby vector
lines. This is "column swapping + row look-ahead": rows are interleaved,
not processed one after another. The sorting is not hardware; any order
is correct, and it only changes the cache hit rate.

Line addresses map to DDR4 as [6:0] column (line within the 8 KB row),
[10:7] bank, [26:11] row.

### 3.2 Rank datapath

1. `inst_decoder` takes one instruction at a time from the Inst Buffer
   while the rank is idle. OP_LPN starts a job; OP_CACHE_INV clears the
   cache.
2. `index_address_generator` streams the pair lines from DRAM. It keeps
   at most `BUF_LINES` lines requested or buffered, and turns each pair
   into (vector line, lane, row).
3. `memory_side_cache` (direct mapped, 64-byte lines, 256 KB) answers one
   cycle after a lookup. On a miss the line is read through
   `memory_interface_unit` and filled.
4. `memory_interface_unit` issues ACT/RD/PRE with an open-page policy and
   the DDR4-2400 timing (tRCD = tCL = tRP = 16, tRC = 55, tBL = 4). It
   serves one line read at a time. Misses take priority over index
   prefetches.
5. `rank_xorsum_buffer` XORs the element into its row's partial sum.
   The 10th element completes the row, which leaves as Rank.XorSum
   `(row_base + row, sum)`.

Elements are handled one at a time: a cache hit costs 3 cycles, and a miss
adds a DRAM access (about 20 to 60 cycles).

### 3.3 The join

`dimm_xorsum_buffer` has one 128-bit entry and a pending bit per row of the
batch (`TREES·4^DEPTH` = 16384 rows). It has four banks by `row mod 4`, so the
four leaves of one ChaCha call are written in one cycle. The first half of a
row to arrive is stored; the second produces `COT = stored xor arriving` on
that bank's output lane.

Both big buffers are plain memories without reset:

* After reset they sweep themselves to zero, one entry per cycle
  (4096 cycles for the DIMM buffer, 1024 for the rank buffer). SPCOT
  instructions are held in the queue until the sweep ends.
* A new batch only advances an epoch number that is stored with every
  entry, so leftovers of an abandoned batch are ignored. A stale entry
  could only alias after 16 consecutive unfinished batches.

## 4. Instructions

`ironman_pkg::nmp_inst_t` fields: `op, rank_id, role, tree, level, pos, addr,
len, aux, data[127:0]`.

| op | unit | meaning |
|---|---|---|
| OP_SET_TAG | DIMM | `data` = ChaCha tag of the batch |
| OP_SET_DELTA | SPCOT | `data` = Δ (sender) |
| OP_SEED | SPCOT | root seed of `tree` (sender) |
| OP_ALPHA | SPCOT | punctured leaf index of `tree` (receiver) |
| OP_KEY | SPCOT | received key `K[level][pos]` of `tree`; level 0 = leaf key (receiver) |
| OP_RUN | SPCOT | expand all trees in role `role`; clears the COT join buffer |
| OP_LPN | rank `rank_id` | job: `addr` = index array line, `len` = pair count, `aux` = vector line, `data[31:0]` = global number of the first row |
| OP_CACHE_INV | rank `rank_id` | invalidate the memory-side cache (after the host rewrites the vector) |
| OP_NOP | — | dropped |

A batch is issued in this order: set-up, OP_RUN, then the LPN jobs. Because
OP_RUN clears the join buffer, a batch's rank sums must not arrive before its
OP_RUN leaves the queue. COT rows are numbered `tree·4^DEPTH + leaf`. The host
assigns LPN rows to ranks so that every row number of the batch is produced
by exactly one rank.

## 5. Parameters

| parameter | default | meaning |
|---|---|---|
| `TREES` | 4 | GGM trees expanded together per batch |
| `DEPTH` | 6 | tree levels; ℓ = 4^DEPTH = 4096 leaves |
| `STACK_ENTRIES` | 192 | node LIFO size |
| `CACHE_BYTES` | 262144 | memory-side cache per rank (1 MB = 1048576 also useful) |
| `BLOCK_ROWS` | 1024 | LPN rows per job |
| `WEIGHT` | 10 | non-zeros per LPN row |
| `T_RCD/T_CL/T_RP/T_RC/T_BL` | 16/16/16/55/4 | DDR4-2400 timing in controller cycles |

Shared widths and types are in `rtl/ironman_pkg.sv`.

**Fit to the reference parameter sets.** For 2^20 and 2^21 OTs per run
(ℓ = 4096, t = 480 and 600 trees), the design runs t/4 batches at its defaults.
The sets for 2^22 to 2^24 OTs use ℓ = 8192. That is not a power of four, so
those sets need `DEPTH` = 7 and the host discards the extra leaves; the
defaults do not cover them. The LPN side has no size limit beyond the 32-bit
line addresses: vectors of up to 480 000 elements and any number of
1024-row jobs.

## 6. Verification

Every module has a self-checking testbench in `tb/`. Each one ends with
`TB_RESULT checks=N failures=M` and has a watchdog. Reference values come
from independent models:

* a loop-based ChaCha8 and GGM tree in `tb/ironman_tb_pkg.sv`
* a hash-based vector generator
* plain software XORs
* a behavioural DDR4 rank, `tb/dram_model.sv`, that checks ACT/RD/PRE
  legality and the tRCD/tRP/tRC timing

| testbench | what it establishes |
|---|---|
| `tb_chacha8_core` | random states fed back to back against the software ChaCha8; every output exactly 8 cycles after its input |
| `tb_ggm_expansion_unit` | children and node descriptor against the software GGM step; 8-cycle latency |
| `tb_node_buffer`, `tb_sync_fifo`, `tb_xor_tree` | against queue and XOR models under random traffic |
| `tb_unified_unit` | full sender batch (leaves and keys exact), then the receiver (all leaves exact, leaf α = sender ⊕ Δ); ChaCha pipeline ≥ 75 % busy |
| `tb_memory_side_cache` | hit/miss and data against a cache model, invalidate |
| `tb_memory_interface_unit` | data, row hit/miss latencies, no DDR timing violation |
| `tb_index_address_generator`, `tb_inst_decoder`, `tb_rank_xorsum_buffer`, `tb_dimm_xorsum_buffer` | address/row streams, decode, per-row sums, any-order join, reset sweep, epoch clear |
| `tb_rank_nmp` | three LPN jobs against DRAM; every row sum exact; cache misses exactly once per newly touched line; invalidate works; no DDR violation |
| `tb_dimm_nmp` | instruction routing by rank id, NOP dropped, sender and receiver batches with modelled rank sums |
| `tb_ironman_pu` | whole PU, 3-level trees: sender batch then receiver batch, every COT row exact in both, every mechanism counted |
| `tb_ironman_pu_full` | the same at every default: 16384 COT rows per batch, 16 LPN jobs per batch, 256 KB caches |

The two top-level benches count these events and fail if any never occurs:

* cache hits, misses and invalidates
* DRAM row hits and misses
* row sums from both ranks
* both roles
* node recoveries
* recovery stalls
* α leaves

The full-size run simulates about 770 000 cycles in a few seconds with
Verilator and reports 5460 ChaCha calls in 5487 cycles.

Each module can be simulated with plain Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/ironman_pkg.sv tb/ironman_tb_pkg.sv \
  $(ls rtl/*.sv | grep -v ironman_pkg) tb/dram_model.sv \
  tb/tb_ironman_pu_full.sv --top-module tb_ironman_pu_full -o sim
./obj_dir/sim
```

The packages must come first on the command line. `-Wno-fatal` keeps the
lint warnings listed in section 7 from stopping the build. Smaller benches
need only the modules they use.

## 7. Where this RTL departs from, or goes beyond, the architecture description

* **Concat Unit / Padd Counter.** The ChaCha input layout, and the use of
  the parent's level as the counter word, are this design's.
* **Keys and partial sums** sit in registers of the unified unit, not in the
  node buffer. Recovery writes the three unknown siblings of a level at once;
  the description speaks of even/odd sums of a binary tree.
* **One ChaCha core per DIMM module** (x = 1), so the XOR tree has 2 inputs.
* **Rank module is not pipelined.** It handles one element at a time and
  one DRAM read at a time. The LPN results are exact, but its throughput is
  lower than a pipelined or multi-request rank module would give.
* **Cache organisation** (direct mapped, 1-cycle lookup) and the **address
  map** are this design's. Other organisations would change only the hit
  rate.
* **Pair encoding** (row and col in one 64-bit word) and the instruction
  format are this design's.
* **OP_CACHE_INV** exists because the host rewrites the vector between
  batches.
* **Not built:**
  * the host, its memory controller and the DRAM devices (a testbench model
    stands in for the DRAM)
  * the offline index sorting
  * the base OTs and network that carry the keys
  * more than one PU
* **ℓ = 8192.** The reference sets with ℓ = 8192 need a 7-level (truncated)
  tree, which the defaults do not provide.
* **Lint.** Verilator reports the following and nothing else:
  * PINCONNECTEMPTY for status outputs that are left unconnected
  * unused parameters, mostly in the shared package
  * unused signals
  * SYNCASYNCNET, because assertions sample the asynchronous reset
