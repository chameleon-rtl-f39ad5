# A near-memory IVF-PQ vector-search accelerator

Retrieval-augmented language models look up, for every retrieval step, the K
nearest neighbours of a query vector in a database of up to billions of
vectors. Held in a compressed form (product quantization, PQ), such a database
still needs tens of GB of memory, and scanning it is limited by memory
bandwidth, not arithmetic. The design here is the search engine of one memory
node of a disaggregated system: the node keeps a shard of the compressed
database in its DRAM channels and has a small accelerator beside that memory.
The accelerator scans the probed parts of the database at one vector per clock
per decoding unit, keeps the K best, and returns their distances and 64-bit
vector IDs. Picking which parts to probe (the index scan), merging the results
of several nodes, the network stack and the language model itself are outside
this RTL.

This is an RTL rendering of the accelerator described in the Chameleon
retrieval-augmented-LM system (ChamVS). The block structure and the main sizes
follow that description; the number formats, port protocols, sequencing and
memory layout were not given there and are this design's own. Those choices
are listed in "Where this design decides for itself" below.

## The search problem in hardware terms

The database is organised as an IVF-PQ index:

* **IVF.** The vectors are clustered into `nlist` = 32768 lists, each with a
  coarse centroid. A query scans only the `nprobe` ≤ 32 lists whose centroids
  are nearest to it. The host chooses those lists and sends their numbers with
  the query.
* **PQ.** Each vector is stored as the residual from its list's centroid. The
  residual is split into `m` = 16 sub-vectors of `D*` = 8 elements. Each
  sub-vector is replaced by the number (one byte) of its nearest of 256
  codebook centroids. A 128-dimensional vector therefore takes 16 bytes.
* **Distance by table.** For a query `q` and a list `l`, the accelerator
  builds a table `T[s][c] = |(q − centroid_l)_s − codebook[s][c]|²` of m × 256
  entries. The approximate squared distance to a stored vector with code
  bytes `b_0..b_15` is then `Σ_s T[s][b_s]`: sixteen table reads and an
  addition, with no multiplications per vector.

## Data flow

```
 query ─► lut_construct ──table──► pq_decode[0] ─► pq_decode[1] ─► … ─► pq_decode[7]
             ▲                         │ ▲              │ ▲                  │ ▲
   coarse centroids,                   │ └── codes ─────┴─┼── mem_ctrl ──────┘ │
   codebook (on chip)                  ▼                  ▼   │  ▲             ▼
                                  2 L1 queues  …     2 L1 queues │  │ 4 DRAM channels
                                       └────────┬─────────┘   │  │
                                           L2 queue (K=100)   │  │
                                                │             ▼  │
                                          result_fetch ── ID reads
                                                │
                                           results {qid, rank, distance, ID}
```

For each probed list the top-level controller (`chamvs_accel`) does four
things in turn:

1. It reads the list's directory entry (`ivf_list_dir`). The entry tells each
   of the 8 decoding units where its share of the list lies in DRAM.
2. It builds the list's table (`lut_construct`): m × 256 = 4096 entries, one
   per clock.
3. It passes the table down the chain of decoding units, each of which
   stores it and forwards it one clock later.
4. It streams every unit's share of codes from DRAM (`mem_ctrl`) through the
   unit.

After the last list it flushes the selection queues. The K best then leave in
ascending order, and their IDs are fetched from DRAM (`result_fetch`).

## PQ decoding unit (`pq_decode`)

Each unit holds its own copy of the table as 16 separate columns of 256
entries, so all 16 lookups happen in the same clock. Codes enter through a
16-deep FIFO. Each byte of a code addresses its own column, and a pipelined
adder tree of log2(m) = 4 levels sums the 16 values. The unit delivers one
candidate `{distance, unit number, ID index}` per clock, 2 + log2(m) = 6
clocks after a code enters. The output is never stalled.

## K-selection: the truncated two-level queue (`systolic_pq`, `ahpq`)

This is the least obvious part of the design.

A **systolic priority queue** is a row of registers with a compare-and-swap
between neighbours. Here it is odd-even transposition sort:

* In alternate clocks, the even pairs and then the odd pairs exchange when
  out of order. The best entry drifts to the output end and the worst to the
  input end.
* A new candidate replaces the worst entry, if it is better.
* Because a new value needs a clock to move away from the input end, the queue
  accepts one input every two clocks. Each queue has a fixed phase for this.
* When the queue is full, the replaced entry is lost and counted (`drop`).
* To read the queue out, the registers shift toward the output and empty
  entries enter behind. A candidate inserted at the end stays sorted because
  the compare-swap continues.

Because a queue takes only one input every two clocks and a decoding unit
produces one candidate per clock, each unit feeds a **pair** of level-1 (L1)
queues. The one on its input phase takes the candidate. Over the query, each
L1 queue keeps its own best entries. At the end, every L1 queue is emptied,
worst first, into a single level-2 (L2) queue of length K = 100. The L2 queue
keeps the best 100 of all of them, and its content is the result.

An exact design would make every L1 queue K long. The approximation is to
**truncate the L1 queues to 20 entries**. With 16 L1 queues, the 100 true
nearest neighbours are spread across them at random, about 6 per queue, and a
queue almost never holds more than 20 of them. A truncated queue therefore
loses candidates, but almost never a true result. Queue cost grows linearly
with length, so this cuts the selection logic roughly five-fold.

`drops` reports how many candidates the L1 queues discarded in the current
query. Drops are normal: every candidate beyond 20 per queue is one. They
indicate a wrong answer only if a discarded candidate belonged in the top K,
which this design does not detect.

The flush takes about 2 × (16 × 20) + 100 clocks. Results leave in ascending
distance order under `out_ready`. The query's `k` (1..100) sets how many are
returned. If fewer candidates were seen than `k`, the output stops early; if
none were seen, a single empty record (distance all ones) is returned.

## Memory side (`ivf_list_dir`, `mem_ctrl`, `code_reader`, `result_fetch`)

Each IVF list is split into 8 sub-lists, one per decoding unit. Units 2c and
2c+1 read from DRAM channel c, so the scan load is spread across all four
channels.

The **directory** holds, for every (list, unit) pair, a descriptor of that
sub-list:

* the word address of its codes,
* the index of its first ID,
* the number of vectors.

**Codes** are packed four to a 512-bit word. A sub-list starts on a word
boundary and may end part-way through a word.

**IDs** are 64 bits, eight to a word, in the same channel. The ID of vector
`id_base + n` is at word `(id_base + n)/8`, lane `(id_base + n)%8`.

**Controller.** Per channel, a round-robin arbiter chooses one request per
clock among the channel's code readers and the ID fetch port. The channel must
answer in order; a tag FIFO records which requester each answer belongs to.
Each code reader keeps up to 8 words in flight or buffered, and unpacks them
into codes.

**ID fetch.** After selection, each result costs one word read: fetch, then
emit `{qid, rank, distance, ID, last}`.

The channel ports are plain request/response streams. A DDR4 controller would
sit behind each of them; it is not part of this design.

## Interfaces of the top (`chamvs_accel`)

| group | signals | use |
|---|---|---|
| query | `q_valid/q_ready, q_qid, q_k, q_nprobe, q_vec, q_lists[32]` | one query at a time; `q_ready` only when idle; vector = 128 signed bytes |
| results | `res_valid/res_ready, res` | `result_t` records, `res.last` on the final one |
| host load | `cb_*`, `cc_*`, `dir_*` | write codebook, coarse centroids and directory before queries |
| memory | `ch_req_*[4]`, `ch_resp_*[4]` | 512-bit read port per DRAM channel, in-order answers |
| status | `drops` | L1 candidates discarded in the current query |

Every handshake transfers on a clock edge where both valid and ready are high.
The reset is asynchronous and active low.

## Sizes

The defaults, in `chamvs_pkg` and the module parameters, are the main
configuration:

* m = 16 code bytes and D* = 8, so D = 128
* nlist = 32768 and nprobe ≤ 32
* K ≤ 100
* 8 decoding units, 16 L1 queues of 20 entries, one L2 queue of 100
* 4 DRAM channels

A 1e9-vector SIFT-like shard takes 24 GB of codes and IDs, which fits the
four 16 GB channels of one node. Deep (D = 96) fits by padding each sub-vector
with two zero elements.

The 32- and 64-byte code datasets need `M=32, DS=16` and `M=64, DS=16`. The
RTL is written for those values, but they are not the defaults. Those
configurations were not simulated.

Timing per probed list: about 4096 clocks to build the table, then at best one
code per unit per clock.

## Where this design decides for itself

* **Number formats.** Elements are 8-bit signed fixed point. Table entries and
  distances are 32-bit unsigned integers, and with these sizes the arithmetic
  is exact.
* **Residual tables.** The coarse centroid is subtracted from the query before
  the table is built, one table per probed list.
* **Table construction.** The unit produces one entry per clock from on-chip
  copies of the codebook and of all 32768 coarse centroids (4 MB). A real
  device might keep the centroids in DRAM instead.
* **No overlap between lists.** The next list's table is built only after the
  current list is scanned, because each unit has a single table buffer. Double
  buffering would hide the roughly 4100 build clocks per list. This is the main
  performance gap of this version.
* **Eight decoding units.** Four channels at 140 MHz could feed about 32 units
  of 16 bytes per clock. Eight units is the configuration whose queue
  arithmetic is worked out (16 L1 queues of 20). To scale, change `NPQ` and
  `L1LEN` together.
* **One query at a time.** One outstanding ID read at a time, and
  round-robin memory arbitration.
* **Empty records.** A query with no candidates returns one record with the
  all-ones distance and ID.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`, has a watchdog, and draws all randomness
from `$urandom`. The DRAM channels are a behavioural model
(`tb/dram_channel_model.sv`) with random refusals and random 4–20 clock
latency.

`tb_chamvs_accel` runs the top at its default sizes. It loads a random
codebook, centroids for 40 lists (including list 32767) and random sub-list
sizes (some empty, many ending in partial words). It then runs six queries
against an exact reference model:

* 4 lists, K = 100
* 8 lists, K = 10
* a list with fewer than K vectors
* an empty list
* all 32 lists, K = 100
* 2 lists, K = 1

It checks every distance, ID, rank and last flag. It also requires that L1
overflow, memory stalls, result back-pressure, multi-list queries, partial
words, early end and the empty result all occur. It finishes in well under a
minute.

Running a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_chamvs_accel \
  -y rtl -y tb +libext+.sv -Irtl rtl/chamvs_pkg.sv tb/tb_chamvs_accel.sv
./obj_dir/Vtb_chamvs_accel
```

## Files

| file | block |
|---|---|
| `rtl/chamvs_pkg.sv` | shared sizes and record types |
| `rtl/lut_construct.sv` | distance-table construction |
| `rtl/pq_decode.sv` | PQ decoding unit |
| `rtl/systolic_pq.sv` | systolic priority queue |
| `rtl/ahpq.sv` | two-level truncated K-selection |
| `rtl/ivf_list_dir.sv` | list directory |
| `rtl/code_reader.sv` | one unit's code stream from DRAM |
| `rtl/mem_ctrl.sv` | channel arbitration and routing |
| `rtl/result_fetch.sv` | result ID fetch |
| `rtl/sync_fifo.sv` | FIFO helper |
| `rtl/chamvs_accel.sv` | top level |
