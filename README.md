# SATA scheduler: locality-aware ordering of selective (TopK) Query-Key attention

In TopK selective attention every query is scored against only K of the N keys.
The resulting binary mask is sparse and scattered: a compute engine that keeps
queries resident (query-stationary) and streams keys past them wastes most of
its slots, because each key is needed by only some of the loaded queries, and
query loading and key MACs cannot overlap.

SATA fixes the order, not the arithmetic. For each head (or tile of a head) it

1. **sorts the keys** so that keys attended by the same queries are adjacent,
2. **classifies the queries** against a *heavy size* `S_h`: a HEAD query needs none
   of the last `S_h` sorted keys, a TAIL query none of the first `S_h`, a GLOB query
   needs keys at both ends,
3. **schedules** loads and MACs so that while the first `S_h` keys are MACed the
   queries that do not need them are loaded, and while the last `S_h` keys are
   MACed the next head's queries are already being loaded.

This repository contains synthesizable SystemVerilog for that scheduler: the
sorting datapath, the classifier, the zero-skip filter, the operand FIFOs and
the scheduling state machine. Its output is two operand streams, *load query q*
and *MAC key k*, for a query-stationary matrix engine (a compute-in-memory macro
or a systolic array). The engine itself is not part of this RTL.

## A six-token example

Mask (row = query, columns = keys it attends, K = 3):

| query | keys |
|---|---|
| 0 | 0 3 4 |
| 1 | 1 2 5 |
| 2 | 1 2 5 |
| 3 | 0 1 4 |
| 4 | 0 3 4 |
| 5 | 0 2 4 |

Starting from key 0, the sort gathers the keys used by queries 0, 4, 3 and 5
first. The hardware order is `0 4 3 | 1 2 5`. With `S_h = 3`:

* queries 0 and 4 use only the first three keys, so they are **HEAD**;
* queries 1 and 2 use only the last three keys, so they are **TAIL**;
* queries 3 and 5 use both halves, so they are **GLOB**.

The two GLOB queries do not exceed the threshold theta = 3, so `S_h` stays at 3.
HEAD and TAIL queries tie (2 against 2), and a tie makes the head HEAD-type.
The schedule is then:

| step | MAC keys | load queries |
|---|---|---|
| init | - | 0 4 3 5 (HEAD, then GLOB) |
| intoHD | 0 4 3 | 1 2 (TAIL) |
| outtaHD | 1 2 5 | major queries of the next head |

Queries 0 and 4 are not needed for keys 1, 2 and 5, so their slots can take the
next head's queries. `tb_classifier` and `tb_status_regs` replay this example.

## Block structure

```
 mask rows ──► qk_trace_regs ──columns──► dot_product_engine ──► psum_regs ──► max_k
 (N bits/cycle)     │   (N x N regs)        (AND + adder tree)    (N scores)   (argmax)
                    │                                                  │
                    └──rows──► classifier ◄── ranks, S_h ── status_regs (control FSM,
                                                                sorted flags, ranks,
                                                                query tags, LFSR)
                                                                 │   │    │
                                                      zero_unit ◄┘   │    │
                                                       │      │      │    │
                                                    KFIFO   QFIFO  head-info queue
                                                       └──────┴──────┬────┘
                                                               schedule_fsm
                                                         rd_k stream   wr_q stream
```

| module | role |
|---|---|
| `sata_pkg` | shared widths, enums (`qtype_e`, `htype_e`, `sched_state_e`), FIFO entry structs |
| `qk_trace_regs` | N x N mask register array; row write, two column reads, full read |
| `priority_encoder` | lowest set bit; walks the unsorted keys in ascending order |
| `dot_product_engine` | `popcount(QK[:,i] & QK[:,j])` with a binary adder tree |
| `psum_regs` | one cumulative similarity score per key, with its adder |
| `max_k` | running argmax of one sorting pass |
| `classifier` | HEAD/TAIL/GLOB tag of one query per cycle, tag counters, concede decision, head type |
| `zero_unit` | finds all-zero rows and columns; drops their FIFO writes when zero-skip is on |
| `sync_fifo` | first-word-fall-through FIFO, used as KFIFO, QFIFO and head-info queue |
| `status_regs` | controller of sorting, classification and FIFO writes; instantiates the datapath blocks |
| `schedule_fsm` | the inter-head scheduling state machine |
| `sata_top` | the whole scheduler |

## Sorting without recomputing similarity

The greedy sort keeps a *dummy* vector: per query, the number of already-sorted
keys it attends. The next key is the unsorted key `i` with the largest
`dummy · QK[:,i]`. Computing that directly costs N dot products of N-bit
vectors against an integer vector for every pick. Instead, `psum_regs` keeps
`psum[i] = Σ_{sorted j} QK[:,i]·QK[:,j]`, which is the same number. Each time a
key `j` is sorted, every unsorted column is visited once and gets
`psum[i] += popcount(QK[:,i] & QK[:,j])`. Only binary ANDs and a popcount
tree are needed.

The visit is time-multiplexed: one column per cycle. The priority encoder gives
the lowest unsorted, not yet visited column. The dot product and the psum
addition happen in the same cycle, and `max_k` takes the updated psum. A
candidate replaces the stored maximum only if it is strictly larger, so on a
tie the lowest key index wins. After the pass, one PICK cycle does four things:

* marks the argmax key as sorted,
* gives it the next rank,
* writes it to KFIFO,
* makes it the new reference column `j`.

The first key (the seed) is random in the algorithm. Here it comes from an
8-bit LFSR reduced modulo N, or from `seed_ext` when `seed_ext_en` is set.

Sorting takes O(N²) cycles. Count the cycle in which the start is sampled as
cycle 0. The seed is written in cycle 1, and the last key in cycle
`1 + N(N-1)/2 + 2(N-1)`, which is 494 for N = 30. Classification then takes
`N + 1` cycles per value of `S_h` tried. The query writes take `3N` cycles and
the head-info word one more. With no back-pressure, a 30-token tile that needs
no concede is in the FIFOs after 494 + 31 + 90 + 1 = 616 cycles. `tb_status_regs`
checks both numbers.

## Classification and conceding S_h

`S_h` starts at `floor(N/2)`. For each query the classifier ANDs the row with
two key masks, "rank < S_h" and "rank ≥ N − S_h":

* no hit in the last region: the query is HEAD;
* otherwise, no hit in the first region: the query is TAIL;
* otherwise: the query is GLOB.

A query that meets both rules is tagged HEAD. This happens when it uses only
middle keys, or no keys at all.

After a pass over all N queries, the number of GLOB queries is compared with the
threshold `theta` (an input; N/2 in the evaluation this design follows). If it
is larger, `S_h` is lowered by one and the queries are classified again. This is
called *conceding*. Smaller `S_h` makes the two end regions shorter, so fewer
queries touch both. Otherwise the head type is fixed:

* HEAD-type if `#HEAD ≥ #TAIL`, else TAIL-type;
* GLOB-type if `S_h` has fallen to 0, because then no locality is left.

Queries are written to QFIFO in three passes over the tags:

1. major tag (HEAD for a HEAD-type head, TAIL for a TAIL-type head);
2. GLOB;
3. minor tag.

After that, a head-info word is written to a two-entry queue. It holds `S_h`,
the head type, the number of keys written, the number of major+GLOB queries,
the number of minor queries, and a last-head flag. Keys are written to KFIFO
with their rank as they are sorted.

## The scheduling state machine

`schedule_fsm` reads the head-info queue and the two FIFOs. Each state is one
time step:

| state | MAC keys (rank range) | load queries |
|---|---|---|
| `INIT` | - | major + GLOB queries of the first head of a layer |
| `INTOHD` | `[0, S_h)` | minor queries of this head |
| `MIDSTHD` | `[S_h, N−S_h)`, only if non-empty | - |
| `OUTTAHD` | `[N−S_h, N)` | major + GLOB queries of the **next** head |
| `WRAPGQ` | - | all queries of a GLOB-type head |
| `WRAPGK` | all keys of a GLOB-type head | - |

After `OUTTAHD` the FSM moves to the next head's `INTOHD`, because that head's
major queries are already loaded. After a GLOB head, or at the start of a layer,
it goes through `INIT`. The steps overlap the two operand streams. In `INTOHD`
the minor queries load while the first keys MAC; this is safe because minor
queries do not use those keys. In `OUTTAHD` the current head's major queries do
not use the last keys, so their slots can be refilled.

Each step drives its key list on `rd_k_*` and its query list on `wr_q_*` at the
same time. Both are valid/ready streams carrying one item per cycle. A step ends
one cycle after both lists are done, so an unstalled step takes
`max(#keys, #queries) + 1` cycles. `OUTTAHD` of a head that is not the last
reads the next head's info word first:

* its query list starts one cycle late;
* it waits as long as the next head has not been sorted yet (`sched_starve`
  counts those cycles).

Key ranges are found from the ranks in KFIFO, so keys removed by zero-skip
simply do not appear.

The three-head example that the scheduling description walks through has
N = 8 and `S_h` = 4, 3, 4. The middle head has five major queries. Its
schedule is eight time steps:

| step | head | MAC keys (sorted) | load queries (sorted) |
|---|---|---|---|
| T0 INIT | 0 | - | 0-3 |
| T1 INTOHD | 0 | 0-3 | 4-7 |
| T2 OUTTAHD | 0 | 4-7 | 0-4 of head 1 |
| T3 INTOHD | 1 | 0-2 | 5-7 |
| T4 MIDSTHD | 1 | 3-4 | - |
| T5 OUTTAHD | 1 | 5-7 | 0-3 of head 2 |
| T6 INTOHD | 2 | 0-3 | 4-7 |
| T7 OUTTAHD | 2 | 4-7 | - |

`tb_schedule_fsm` reproduces this table exactly and takes 40 cycles for it.

## Zero-skip and tiles

Long sequences are split into square tiles of `S_f` tokens, and each tile is
scheduled like a small head. Within a tile, some queries attend no key of the
tile and some keys are attended by no query. `zero_unit` finds them by
reducing rows and columns. When `zero_skip_en` is set, it drops their FIFO
writes, so they are neither loaded nor MACed. Such keys are still sorted; they
score 0 and keep a rank. Cutting the mask into tiles and sending them in order
is the job of whatever feeds `sata_top`.

## Top-level interface (`sata_top`)

| port | dir | meaning |
|---|---|---|
| `mask_valid/mask_ready/mask_row[N]` | in/out/in | one query row per transfer, query 0 first. The N-th row starts the tile. `mask_ready` is low while a tile is being sorted (single mask buffer). |
| `last_head` | in | sampled with row N−1; marks the last tile of a layer |
| `zero_skip_en` | in | enable zero-skip; hold it stable until `sort_busy` falls |
| `theta` | in | GLOB threshold (N/2 in the evaluation) |
| `seed_ext_en/seed_ext` | in | use an external seed key instead of the LFSR |
| `rd_k_valid/ready/idx/head` | out/in/out/out | MAC key `idx` of tile number `head` |
| `wr_q_valid/ready/idx/head` | out/in/out/out | load query `idx` of tile number `head` |
| `sched_state/step/s_h/ht/starve` | out | FSM state, time-step counter, current head's `S_h` and type, wait cycles |
| `sort_busy/sort_seed/sort_concedes` | out | sorter status: busy, seed key in use, `S_h` decrements of the current tile |

Sorting of tile h+1 overlaps scheduling of tile h. KFIFO and QFIFO hold 2N
entries each, so two tiles are in flight. When any queue is full, the sorter
waits.

## Parameters and sizes

| parameter | default | where it comes from |
|---|---|---|
| `N` (tile size S_f) | 30 | largest tile among the evaluated workloads (TTST, one 30-token tile) |
| `SF_MAX` (package) | 32 | sizes the index fields; matches the 32 x 32 compute sub-array |
| `FIFO_DEPTH` | 2N | own choice: two tiles in flight |
| psum width | ceil(log2(N²+1)) = 10 | large enough that no sum can overflow |

The evaluated workloads and how they map onto N = 30. Token counts, K and
tile fractions are the published evaluation settings:

| workload | tokens | K | tile | fits |
|---|---|---|---|---|
| TTST | 30 | 15 | 30 (whole sequence) | yes, exactly |
| KVT-DeiT-Tiny | 198 | 50 | 0.11·198 ≈ 22 | yes: elaborate with `N = 22`, or zero-pad into 30 with zero-skip |
| KVT-DeiT-Base | 198 | 64 | ≈ 22 | same as Tiny |
| DRSformer | 48 | 12 | 0.125·48 = 6 | yes: `N = 6`, or zero-padded |

With random masks of these shapes (no locality, unlike real attention scores) a
22-token tile is scheduled in about 510-545 cycles, a 6-token tile in about 60 and
the 30-token TTST tile in about 1100, most of it sorting and repeated classification.

Zero-padding keeps the result correct, but `S_h` then starts at 15 rather than
at half the real tile. The schedule therefore differs from one built at the
exact tile size.

## Where this RTL departs from, or adds to, the published description

* **GLOB heads are scheduled in place.** `WRAPGQ`/`WRAPGK` run where the head
  occurs. The description defers GLOB heads until all local heads are done,
  which needs buffering several heads.
* **Meaning of a GLOB head.** The algorithm lowers `S_h` until GLOB queries are
  no more than theta, and it always stops by `S_h = 0`. Here a head is GLOB-type
  exactly when `S_h` reached 0.
* **Tie of HEAD and TAIL counts.** The tie gives a HEAD-type head, as in the
  worked example. The pseudo-code's strict `>` would give TAIL.
* **Ties in the sort** go to the lowest key index. The worked example in the
  description lists the first three keys as 0, 3, 4, while this hardware
  produces 0, 4, 3. The sets, and so the classification and the schedule,
  are the same.
* **Order of the states.** States follow the bullet list of the description
  (init, intoHD, midstHD, outtaHD). The pseudo-code attaches the previous head's
  last keys to `intoHD`; that is the same sequence, labelled differently.
* **Own choices:**
  * cycle timing, one column or one query per cycle;
  * the valid/ready streams and the extra cycle per step;
  * FIFO depths and the single-buffered mask;
  * the LFSR polynomial (x⁸+x⁶+x⁵+x⁴+1);
  * the three-pass query write;
  * resets (asynchronous, active low).
* **Not included:**
  * the TopK index unit that produces the mask (taken from earlier accelerators);
  * the compute engine: CIM tiles, buffers, accumulators;
  * DRAM.

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops itself
with a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/sata_pkg.sv tb/sata_ref_pkg.sv rtl/*.sv tb/tb_sata_top.sv \
    --top-module tb_sata_top -o sim && obj_dir/sim
```

`tb_sata_workloads` also needs `tb/sata_workload_run.sv`.
Replace `tb_sata_top` with any `tb/tb_<module>.sv` to test one block.
`sata_pkg.sv` and `sata_ref_pkg.sv` must come first. Skip `sata_ref_pkg.sv`
for testbenches that do not import it; including it is harmless.

| testbench | what it checks |
|---|---|
| `tb_sata_top` | Ten 30-token tiles in two layers, with every parameter at its default. Every key read and query load is compared with a behavioural reference (`tb/sata_ref_pkg.sv`): index, tile number and FSM state. The tiles include HEAD and TAIL heads, a tie, concedes, a GLOB head, zero-skip of queries and keys, an LFSR seed, random and long back-pressure, queue-full stalls of the sorter, and the scheduler waiting for a sorted tile. Each mechanism must occur at least once. |
| `tb_sata_workloads` | The shapes of the four evaluated workloads, each in its own `sata_top` sized to its tile: TTST (30 tokens, K = 15, one 30-token tile), KVT-DeiT-Tiny and -Base (198 tokens, K = 50 / 64, 81 tiles of 22), DRSformer (48 tokens, K = 12, 64 tiles of 6). Masks are random TopK masks of that shape. Every transfer is checked; cycles per tile and S_h statistics are printed. |
| `tb_status_regs` | The six-token example, then random tiles against the reference, with and without FIFO-full stalls. Sorting and head-info latencies are checked. |
| `tb_schedule_fsm` | The eight-step table above, cycle-exact. Then 24 random heads, including GLOB heads and missing keys, under random ready. |
| `tb_classifier` | Tags of the six-token example, tie, concede and `S_h = 0`. Then random ranks and rows. |
| others | Each leaf block against an independent model. |

The reference package implements the algorithm literally: an explicit dummy
vector, with all ranks recomputed for every `S_h`. It does not copy the
hardware's incremental shortcuts.
