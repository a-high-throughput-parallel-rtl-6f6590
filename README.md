# Parallel hash table on XOR-encoded replicas

This is a dynamic hash table for FPGAs. It answers **P queries every clock
cycle**, one per processing engine (PE), whatever the keys are. Search,
insert/update and delete are all supported. The rate holds in the worst
case: there are no partitions to collide in and no stalls. The only rule is
that at most **K** queries per cycle may change the table, and they must go
to the K "full" PEs.

The difficulty is memory ports. P lookups per cycle need P read ports on the
table, and K writers need K write ports. FPGA block RAMs have one read port
and one write port. The design gets there in two steps:

* **Replication gives the read ports.** Every PE keeps its own complete copy
  of the table, so each PE reads only its own RAMs.
* **XOR encoding gives the write ports.** Inside each copy, the table is
  split into K XOR shares. Each full PE writes only its own share, and every
  copy of that share is written by one pipeline, one PE at a time.

The scheme follows Zhang, Wijeratne, Yang, Kuppannagari and Prasanna, "A High
Throughput Parallel Hash Table on FPGA using XOR-based Memory". This RTL is an
independent implementation of that description. Section "What the RTL adds to
the description" lists the details chosen here.

## The table

The table is a closed-addressing hash table:

* It has `2^IDX_W` buckets, and each bucket has `SLOTS` slots.
* A key `x` lives in bucket `h(x)`, in any slot of that bucket.
* `h` is a Class H3 hash: bit `m` of the key selects row `m` of a constant
  Boolean matrix Q, and the selected rows are XORed together.
  `ht_pkg::h3_row` generates Q from a seed. All PEs must use the same seed.

A slot is `{valid, key, value}`, which is `1 + KEY_W + VAL_W` bits. The
operations are:

| op | action | status returned |
|---|---|---|
| `OP_SEARCH` | look the key up | `ST_FOUND` with the value, or `ST_NOT_FOUND` |
| `OP_INSERT` | key present: replace its value. Absent: write it into the lowest empty slot | `ST_UPDATED`, `ST_INSERTED`, or `ST_FULL` when the bucket has no empty slot |
| `OP_DELETE` | clear the slot holding the key | `ST_DELETED` or `ST_NOT_FOUND` |

A search-only PE answers `OP_INSERT` and `OP_DELETE` with `ST_REJECTED` and
changes nothing.

## How one copy of the table is stored: XOR shares

This is the part worth understanding first.

Each PE holds K *partial XOR stores*, which we call columns 0..K-1. Each
store is a RAM of `2^IDX_W` buckets × `SLOTS` slots. The slot that the rest
of the design sees is the XOR of the K stores:

    slot(b, s) = store_0[b][s] ^ store_1[b][s] ^ ... ^ store_{K-1}[b][s]

Only full PE c ever changes column c. In PE c, that store is called
**Partial XOR Store (M)**. To set slot `(b, s)` to a new content `N`, PE c
reads all K stores as it would for a search. It then writes this word into
its own column:

    store_c[b][s] = N ^ (XOR of the other K-1 stores at [b][s])

After the write, the XOR of all K stores is exactly `N`. The word on the
right of `^` is the **mask**. The PE's **non-search XOR tree** computes it
from the same read data. The **search XOR tree** XORs all K stores to decode
the bucket. A write therefore needs no extra read port: the read it needs is
the query's own read. This is the "reads and writes share the read port"
form of an XOR multi-port memory.

Small example with K = 2 and 8-bit slots. PE 0 owns column 0 and PE 1 owns
column 1. The slot starts at `00 ^ 00 = 00`.

1. PE 0 inserts `A5`. Its mask is `store_1 = 00`, so it writes
   `store_0 = A5`. The slot decodes to `A5 ^ 00 = A5`.
2. PE 1 updates the slot to `3C`. Its mask is `store_0 = A5`, so it writes
   `store_1 = 3C ^ A5 = 99`. The slot decodes to `A5 ^ 99 = 3C`.
3. PE 0 deletes the slot. Its mask is `store_1 = 99`, so it writes
   `store_0 = 00 ^ 99 = 99`. The slot decodes to `99 ^ 99 = 00`, which is
   empty.

The valid bit is part of the encoded word. A slot is occupied when the XOR of
the valid bits is 1. A delete writes all zeros, so an empty slot decodes to
all zeros.

## Full and search-only PEs

PEs `0..K-1` are full and PEs `K..P-1` are search-only. Full PE c has
Store (M) in column c, a non-search XOR tree, and result resolution that
produces writes.

A search-only PE still holds all K columns, because it needs every share to
decode a slot. Every one of its stores is written from the ring, none
locally. It has no non-search tree. So a search-only PE saves logic but not
RAM. RAM grows as P × K. The ratio K/P is the "NSQ ratio": the share of a
cycle's queries that may be non-search queries (inserts, updates, deletes).

Total storage is:

    bits = P × K × 2^IDX_W × SLOTS × (1 + KEY_W + VAL_W)

At the defaults this is 16 × 2 × 32768 × 4 × 129 bits, about 541 Mbit. Each
store is built as `SLOTS` RAMs of `2^IDX_W × SLOT_W` side by side. Each of
those RAMs has its own write enable, so a write touches one slot only.

## The write rings and what a query can see

Column c must end up identical in all P PEs. A write made by PE c travels
down a ring, one PE per cycle, in this order:

    c -> c+1 -> ... -> P-1 -> 0 -> ... -> c-1

The chain stops at PE c-1. Each column has a single writer and a one-cycle
hop, so at most one write per column arrives at a PE in any cycle. The
writes of different columns land in different RAMs. No two writes ever
compete for a port. `nsq_ring_hop` is the hop. It picks the local write at
the origin and the upstream write elsewhere, and it registers the write
towards the next PE.

The table is **relaxed-consistent**, as in the paper:

* Nothing forwards data between queries in flight.
* A mutation accepted in cycle `t` (at PE c) is written into Store (M) of
  PE c at the 5th clock edge, counting the edge that accepts the query. It
  reaches PE c+d d cycles later.
* A query accepted in cycle `t + P + 3` or later, in any PE, sees the
  mutation.
* A query on the same bucket accepted earlier may see the old slot. This
  holds for a second mutation too: two inserts of the same key within the
  window can both find the key absent and take two slots.

Applications that need exact answers must keep dependent queries on one
bucket `P + 3` cycles apart. The end-to-end testbench uses exactly this
spacing, so the bound is tight and tested.

## The PE pipeline

Every PE accepts one query per cycle and never stalls. Its stages, counted
in clock edges from the edge that accepts the query:

| edge | stage | module |
|---|---|---|
| 1 | H3 bucket index registered | `h3_hash` |
| 2 | all K stores read the bucket in parallel (synchronous RAM read) | `partial_xor_store` |
| 3 | decoded bucket (search tree) and mask (non-search tree) registered | `xor_tree` |
| 4 | match / first empty slot, response and write request registered | `result_resolution` |
| 5 | write into Store (M) of the issuing PE; one more edge per PE after that | `nsq_ring_hop` |

A response therefore appears 4 cycles after its query, in order. The paper
reports 14 ns for a search and 54 ns for an insert at 16 PEs, which is about
5 and 20 cycles at its 370 MHz. That is the same order as the 4 cycles here
and the `4 + P = 20` cycles for a write to reach every copy.

Result resolution compares all slots with the key in parallel. The lowest
matching slot is the hit, and the lowest empty slot takes a new key.

## Interface of `hash_table_top`

| port | width | |
|---|---|---|
| `clk`, `rst` | 1 | clock; synchronous, active-high reset |
| `q_valid[i]`, `q_op[i]`, `q_key[i]`, `q_value[i]` | P × (1, 2, KEY_W, VAL_W) | query for PE i; accepted every cycle |
| `r_valid[i]`, `r_op[i]`, `r_key[i]`, `r_value[i]`, `r_status[i]` | P × (1, 2, KEY_W, VAL_W, 3) | result of PE i's query from 4 cycles earlier |

There is no back-pressure. The caller decides which PE gets which query.
Non-search queries must go to PEs `0..K-1`.

The RAM contents start at zero through an `initial` block, which is the FPGA
configuration value. Reset clears the pipeline valids and blocks store
writes while it is asserted. It does not clear the table.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `P` | 16 | PEs, i.e. queries per cycle |
| `K` | 2 | full PEs, i.e. the most non-search queries per cycle (NSQ ratio K/P = 2/16) |
| `SLOTS` | 4 | slots per bucket |
| `KEY_W`, `VAL_W` | 64, 64 | key and value widths |
| `IDX_W` | 15 | log2 of the bucket count (32K buckets) |
| `H3_SEED` | `64'h9E3779B97F4A7C15` | seed of the H3 matrix |

The defaults are the 16-PE configuration the paper reports on a Xilinx
U250: 32K entries, NSQ ratio 2/16, 4 slots, 64-bit keys and values. The
paper's other configurations are parameter settings of the same RTL. Two
examples:

* 4 PEs with 128K entries: `P=4, K=2, IDX_W=17`.
* All PEs full, as in its Fig. 2(a): `K=P`.

## What the RTL adds to the description

The published description gives the architecture and the query flow. It
does not give the bit-level details. Where the RTL had to choose, it chose
as follows:

* **Valid bit.** The valid bit is XOR-encoded like the data. The description
  says a slot is read as valid "if all partial stores indicate valid data".
  It also says a delete clears the bit only in Store (M). Those two rules
  disagree once a slot deleted by one PE is refilled by another: only the
  second PE's store is written, so the first PE's cleared bit would stay.
  The encoded bit avoids that.
* **New-key encoding.** A new key is encoded with the mask like an update.
  The description says a new pair is written unencoded. That is the same
  thing when the other stores hold zeros at that slot, but they need not.
* **Full buckets.** An insert into a full bucket returns `ST_FULL`. Status
  codes and the rejection by search-only PEs are this design's own.
* **Pipeline.** The four-stage split above, the one-cycle ring hop, and
  read-first RAMs are this design's choices.
* **Which PEs are full.** Full PEs are `0..K-1`, and PE c owns column c,
  following the paper's figures.
* **H3 matrix.** The matrix is generated from a seed; the paper does not
  print one. The bucket count is a power of two.
* **Search-only RAM.** Search-only PEs keep all K stores, as explained above.
  The paper's text says their Store (M) is "removed". Its figure shows the
  same number of stores in both PE kinds, all fed from the ring. The figure
  is what decoding requires.
* **Not covered by this RTL:** the host side and query routing, the clock
  rate, and the mapping of stores onto specific URAM/BRAM/M20K primitives.

## Source files

| file | content |
|---|---|
| `rtl/ht_pkg.sv` | operation and status enums, H3 row generator |
| `rtl/h3_hash.sv` | hashing unit |
| `rtl/partial_xor_store.sv` | one partial XOR store (1R1W RAM, per-slot write) |
| `rtl/xor_tree.sv` | XOR reduction tree (search and non-search trees) |
| `rtl/result_resolution.sv` | slot matching, first-empty-slot choice, response, encoded write |
| `rtl/nsq_ring_hop.sv` | one hop of a column's write ring |
| `rtl/ht_pe.sv` | processing engine, full or search-only by `PE_ID < K` |
| `rtl/hash_table_top.sv` | P PEs and the K rings |

## Simulation

Each module has a self-checking testbench in `tb/`. Each testbench prints
`TB_RESULT checks=N failures=M` at the end and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_h3_hash` | index against an H3 computed in the testbench, latency |
| `tb_xor_tree` | trees of 1, 2, 3, 4 and 7 inputs |
| `tb_partial_xor_store` | read-first, per-slot writes, zero start, held read data |
| `tb_result_resolution` | every status, slot choice, encoded word, full and search-only |
| `tb_nsq_ring_hop` | a 4-PE ring: order and timing of the hops, end of chain, reset |
| `tb_ht_pe` | a full PE and a search-only PE against a model of both columns; back-to-back searches with 4-cycle latency |
| `tb_hash_table_top` | 4 PEs, K = 2, 64 buckets of 2 slots: all PEs busy every cycle against a table model |
| `tb_hash_table_full` | the same test with every parameter at its default (16 PEs, 32K buckets) |
| `tb_ht_workloads` | the same test on seven other sizes side by side: 2 to 8 PEs, 1 to 8 full PEs, 16K to 128K buckets, 2 or 4 slots, 32- or 64-bit keys |

`tb_hash_table_top`, `tb_hash_table_full` and `tb/ht_top_run.sv` (one run
inside `tb_ht_workloads`) share their body, `tb/ht_top_check.svh`. It keeps all P PEs busy every cycle. It keeps the
model exact by holding a bucket for `P + 3` cycles after a mutation. It
counts and requires each mechanism:

* search hit and miss;
* insert, update and delete;
* full bucket;
* rejection by a search-only PE;
* a hit on a pair written by a different PE;
* all K full PEs mutating in one cycle.

To run one with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/ht_pkg.sv tb/tb_hash_table_top.sv --top-module tb_hash_table_top -o sim
    ./obj_dir/sim

The full-size test runs in about ten seconds. It needs about 100 MB for the
32 stores.
