# REIS: nearest-neighbour retrieval inside a NAND-flash SSD

Retrieval-augmented generation (RAG) spends much of its time on one step: find
the stored text chunks whose embeddings lie nearest to a query embedding. With
a database of millions of chunks, most of that time goes into moving
embeddings from the SSD to the host. This design does the search inside the
SSD instead, and it adds no arithmetic units to the flash dies:

* Embeddings are stored **binary-quantised**: one bit per dimension, 1024 bits
  for a 1024-dimension vector. The Hamming distance between a query and a
  stored vector is the number of ones in `query XOR vector`.
* Every NAND plane already has three page-wide latches: sensing, cache and
  data. Each die already has a **fail-bit counter** and a **pass/fail
  checker**, which the die uses to verify its program pulses.
  * The query is loaded into the cache latch and a page is read into the
    sensing latch.
  * An XOR between the two latches leaves 128 distance vectors in the data
    latch.
  * The fail-bit counter turns one of them into a Hamming distance.
  * The pass/fail checker compares that distance with a threshold. Only
    entries that pass ever cross the flash channel.
* The controller keeps a bounded list of the best entries (the *temporal top
  list*, TTL). It then re-scores those candidates at higher precision (INT8)
  and sorts them. Finally it returns the top-k results together with their
  document chunks, which are found through addresses stored next to each
  embedding in the page's out-of-band (OOB) area.

The search uses the **IVF** (inverted file) scheme:
1. A *coarse* scan compares the query with the cluster centroids and keeps the
   `nprobe` nearest clusters.
2. A *fine* scan covers only the embeddings of those clusters.

Four mechanisms make the in-flash scan fast:
* **Distance filtering (DF)**: the in-die threshold test described above.
* **Pipelining (PL)**: the next page is read into the sensing latch while the
  current one is being evaluated from the data latch.
* **Input broadcasting (IBC)**: one query transfer fills a whole cache latch.
* **Multi-plane IBC (MPIBC)**: one transfer fills the cache latches of every
  plane of a die at once.

Each mechanism can be switched on or off from the top-level ports, so the
effect of each can be measured.

The default configuration is a mainstream SSD:
* 8 channels, 16 dies per channel and 2 planes per die;
* 16 KB pages, with a read time (tR) of 22.5 µs;
* 1.2 GB/s per channel;
* top-10 retrieval.

The clock is taken as 150 MHz. At that rate a channel moves 8 bytes per cycle
and tR is 3375 cycles.

## The slot: the unit everything is built on

A 16 KB page holds 128 binary embeddings. Each embedding fills one 1024-bit
**slot**, and every datapath in the design is one slot wide:
* the latches are arrays of 128 slots;
* the fail-bit counter counts one slot;
* the channel moves slots;
* the INT8 reranker consumes one slot per beat.

Every address used by the controller is a **slot address**: the logical page
number × 128 plus a 7-bit offset. This covers:
* **EADR**: where an embedding sits;
* **RADR**: where its INT8 copy sits;
* **DADR**: where its document chunk sits.

An INT8 embedding of 1024 dimensions takes 8 consecutive slots. A document
chunk is one 4 KB sub-page, which is 32 slots.

Each slot has a 64-bit OOB word:

| stored in the slot      | OOB word                                  |
|-------------------------|-------------------------------------------|
| binary embedding        | `{DADR[31:0], RADR[31:0]}`                |
| cluster centroid        | 8-bit cluster tag in `[7:0]`              |
| INT8 or document data   | unused (0)                                |

A search therefore finds a result's INT8 vector and its text through the OOB
word alone. No page-level mapping table is consulted.

### Where a database lives

When a database is deployed, the engine reserves four consecutive regions of
logical pages. From a running allocator pointer, in this order:

1. centroids (IVF only, `ceil(nlist/128)` pages);
2. binary embeddings (`ceil(N/128)` pages);
3. INT8 embeddings (`ceil(8N/128)` pages);
4. document chunks (`ceil(32N/128)` pages).

One record in the **R-DB** table holds the region bounds, keyed by a database
ID. Because whole regions are contiguous, the record replaces any per-page
translation: this is *coarse-grained access*.

An IVF database also gets one **R-IVF** record per cluster, which holds:
* the centroid's address;
* the first and last embedding index of the cluster;
* an 8-bit tag.

The host must order the embeddings cluster by cluster, so each cluster is a
contiguous index range.

Logical pages are **striped parallelism-first**. Page `L` lives on:
* channel `L % 8`;
* die `(L / 8) % 16`;
* plane `(L / 128) % 2`;
* row `L / 256`.

So 256 consecutive pages, one per plane of the SSD, can be sensed at the same
time.

## Inside a die (`flash_die`, `plane_page_buffer`, `nand_array`)

A die holds `PLANES` planes. Each plane is a `plane_page_buffer` (SL, CL and
DL latches, each 128 slots with OOB) in front of a `nand_array`. The
`nand_array` is a behavioural cell array: a read takes tR and streams the page
into SL, and a program copies CL into the array.

The die also holds one fail-bit counter, one pass/fail checker and a threshold
register. Its command decoder understands these commands:

| command    | effect                                                                 |
|------------|------------------------------------------------------------------------|
| `READ`     | array row → SL (busy for tR)                                           |
| `PROG`     | CL → array row (busy for tPROG)                                        |
| `DIN`      | one slot (+OOB) from the channel into CL                                |
| `DOUT`     | one slot (+OOB) of SL onto the channel                                 |
| `IBC`      | the query slot is copied into all 128 slots of CL; the plane mask picks one plane, or all planes (MPIBC) |
| `XOR`      | DL[i] = SL[i] ^ CL[i] for every slot; DL keeps SL's OOB words           |
| `GEN_DIST` | fail-bit count of DL[slot] → distance, and the pass/fail bit versus the threshold |
| `RD_TTL`   | returns the embedding (recovered as DL ^ CL) and the slot's OOB word    |
| `SET_THR`  | loads the filtering threshold (this design's addition)                  |

Sequencing and timing:
* XOR and IBC walk the 128 slots one per cycle. While they run, `dl_stable`
  is low, and an assertion checks that no `GEN_DIST` or `RD_TTL` reads DL
  then.
* `GEN_DIST` answers one cycle after it is issued.
* `RD_TTL` and `DOUT` answer on the cycle after they are issued.
* The dies of a channel share the command bus. Their response buses are ORed,
  so a die drives zeros unless its response is valid.

Because DL holds the XOR result, SL is free as soon as the XOR is done. That
is what makes the pipelining possible: the next page's `READ` can start while
distances are still being taken from DL.

## One channel (`flash_ctrl`)

Each channel has its own controller. It takes four operations from the
engine:
* `OP_PROG`: one page, fed by 128 data beats.
* `OP_READ`: `n` consecutive slots of one page.
* `OP_IBC`: the query to every plane of the channel.
* `OP_SCAN`: one embedding range.

A channel timer charges the bus for every transfer:
* 2 cycles per command;
* 16 cycles per 1024-bit slot at 8 bytes per cycle;
* 17 or 18 cycles per TTL entry, which carries the slot, the distance and the
  tag or addresses.

The scan is the core of the design. A range covers some pages of this channel.
Pages that sit on different (die, plane) pairs but on the same row form a
**round**. For each round:

1. issue `READ` to every plane that holds a page of the round (all planes
   sense in parallel);
2. for each such plane, in turn:
   1. wait for its read and issue `XOR`;
   2. with **PL**, immediately issue the `READ` of the same plane's page in the
      next round;
   3. for every slot of the page in the range, issue `GEN_DIST`;
   4. if the entry passes, or **DF** is off, issue `RD_TTL` and forward the
      entry to the engine. Otherwise count it as filtered.

Without PL, the next round's reads start only after the whole round is done.
The controller counts, for measurement:
* distances generated;
* entries sent;
* entries filtered;
* overlapped reads;
* IBC transfers.

IBC sends one transfer per plane, or with **MPIBC** one per die with all plane
bits set.

## The engine (`anns_engine`)

The engine stands in for the controller firmware of a real SSD. It accepts
host commands:

| opcode | command      | what it does |
|--------|--------------|--------------|
| `80h`  | `DB_DEPLOY`  | reserve regions for `n` entries and write the R-DB record |
| `81h`  | `IVF_DEPLOY` | the same with a centroid region and `nlist` R-IVF slots |
| `84h`  | `DB_WRITE`   | program one page of a region; 128 data beats follow. For binary pages the engine writes the `{DADR, RADR}` linkage into each slot's OOB |
| `85h`  | `IVF_CI`     | write one cluster's R-IVF record (first/last index, tag) |
| `82h`  | `SEARCH`     | brute-force top-k search over all binary embeddings |
| `83h`  | `IVF_SEARCH` | coarse scan, then fine scan of `nprobe` clusters |

A search command is followed by the query: one binary slot and then the eight
INT8 slots. The engine then works through these steps:

1. **Broadcast** the binary query to all channels (`OP_IBC`).
2. **Coarse scan** (IVF only).
   * Scan the centroid region with filtering off.
   * Keep the `nprobe` nearest centroids in the TTL-C list.
   * Map each kept centroid address to its R-IVF record and check the tag
     read from flash against the record. A mismatch raises `err`.
3. **Fine scan.**
   * Clear the TTL-E list with capacity `10·k`.
   * Scan each selected cluster's index range, on all channels at once.
   * Merge the channels' TTL entries into the list with a round-robin
     arbiter.
   * The list accepts every entry until it is full. After that, an entry
     replaces the current worst entry only if it is strictly nearer. A
     replacement counter shows how often the list overflowed.
4. **Rerank** every kept entry.
   * Read 8 slots at its RADR.
   * `rerank_unit` computes the squared L2 distance between the INT8 vectors,
     128 signed lanes per beat.
   * `topk_sorter` inserts the result in order (a stable insertion sort).
5. **Return** the first k results on `hres` as (rank, INT8 distance, DADR),
   then pulse `hdone`.
6. **Documents.** After the host's `hack`, stream the 32 slots of each
   result's document chunk on `hdoc`.

`err` is sticky. It is set by:
* an unknown database ID;
* an IVF search on a database deployed without IVF;
* an allocation that does not fit;
* a tag mismatch.

## Sizes and parameters

| parameter | default | meaning / origin |
|-----------|---------|------------------|
| `CHANNELS`, `DIES`, `PLANES` | 8, 16, 2 | SSD geometry (the paper's main SSD) |
| `T_R` | 3375 | tR = 22.5 µs at 150 MHz |
| `T_PROG` | 30000 | 200 µs, assumed |
| `CH_BYTES` | 8 | 1.2 GB/s per channel at 150 MHz |
| `CMD_CYC` | 2 | command/address cycles, assumed |
| `ROWS` | 32 | pages per plane, **far smaller than a real plane** |
| `K_MAX`, `CAND` | 10, 10 | top-k, and candidates per result (10·k kept for rerank) |
| `NPROBE_MAX` | 64 | clusters probed at most |
| `RDB_ENTRIES`, `RIVF_ENTRIES` | 16, 8192 | databases and clusters |

With `ROWS = 32` the modelled SSD has 8192 pages. A database entry needs 41
slots: 1 binary, 8 INT8 and 32 document. The model therefore holds about
25 000 entries. The real datasets this design targets (millions of entries)
need a full-size plane, which is only a change of `ROWS`, but the behavioural
arrays then become too large to simulate.

## How this departs from the paper

These choices are this design's own:
* **Selection in hardware.** The paper runs quickselect, INT8 reranking and
  quicksort on the SSD's embedded cores. Here they are hardware blocks:
  * a streaming bounded top list selects the same set as quickselect;
  * a stable insertion sort gives the same order as quicksort.
* **Host commands.** The deploy commands are split into per-page `DB_WRITE`
  and per-cluster `IVF_CI` commands instead of one bulk transfer.
* **One query at a time.** Queries are processed singly, not in batches.
* **nprobe instead of a recall target.** The search takes the number of
  clusters to probe. The paper's "target accuracy" parameter has no defined
  mapping to it.
* **Hamming distances on the fly.** The die forms Hamming distances as the
  scan visits each slot, one slot per `GEN_DIST`. `RD_TTL` rebuilds the
  stored embedding as DL ^ CL.
* **Invented details.** The paper gives no values for any of the following,
  so all are choices here:
  * the threshold register and its `SET_THR` command;
  * the OOB layout;
  * command encodings;
  * channel costs in cycles;
  * the program time;
  * the clock;
  * all field widths.
* **Reranking metric.** Squared L2 over signed INT8 is assumed.

These parts of a real SSD are not built: the embedded processor, the DRAM
(its tables are on-chip arrays here), the PCIe/NVMe host interface, the ECC
engine, and the SLC-mode programming that makes the stored embeddings
error-free.

## Files

`rtl/reis_pkg.sv` holds every shared constant and struct:
* the slot, OOB and distance types;
* the die command and response;
* the controller operation;
* the R-DB, R-IVF and TTL records;
* the host command and result.

The modules, bottom-up:

| module | role |
|--------|------|
| `fail_bit_counter` | population count of one slot, one cycle |
| `pass_fail_checker` | distance < threshold |
| `nand_array` | behavioural cell array of one plane (tR, tPROG, erased = all ones) |
| `plane_page_buffer` | SL/CL/DL latches with the XOR and IBC sequencer |
| `flash_die` | die command decoder, plane select, counter, checker |
| `flash_ctrl` | one channel: program, read, IBC and scan schedules, channel timing |
| `rdb_table`, `rivf_table` | database and cluster records |
| `ttl_topk` | bounded list of the M nearest entries |
| `rerank_unit` | INT8 squared-L2 distance over 8 beats |
| `topk_sorter` | ordered list of reranked results |
| `anns_engine` | host commands, allocation, search sequencing, results and documents |
| `reis_top` | engine + one `flash_ctrl` per channel + `DIES` dies per channel |

## Simulating

Each testbench in `tb/` checks itself and ends with a line
`TB_RESULT checks=N failures=M`. Build and run one with plain Verilator, for
example:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb rtl/reis_pkg.sv \
          tb/tb_reis_top.sv --top-module tb_reis_top -o sim
./obj_dir/sim
```

The block testbenches each check their block against an independent model:
* `tb_fail_bit_counter`, `tb_pass_fail_checker`, `tb_nand_array` (including
  tR and tPROG in cycles);
* `tb_plane_page_buffer`, `tb_flash_die` (every command, both planes,
  multi-plane IBC);
* `tb_flash_ctrl` (the set of entries passing the filter, the linkage fields,
  IBC transfer counts, and that the pipelined and filtered scan is faster);
* `tb_rdb_table`, `tb_rivf_table`, `tb_ttl_topk`, `tb_rerank_unit`,
  `tb_topk_sorter`.

Three system tests share `tb/reis_host_model.sv`, which builds a synthetic
database:
* It has random embeddings, plus planted near neighbours in two of the
  clusters. Their INT8 vectors are built so that the expected INT8 distances
  are 1, 4, 9, ….
* It also has close decoys, which win the binary scan but have no INT8 data.

The host model checks:
* the ranks, distances and document contents;
* that filtering discarded entries;
* that MPIBC used one transfer per die;
* that the TTL overflowed;
* that the distance count equals the centroids plus the probed clusters.

It runs three searches:
* an IVF search with all optimisations;
* the same search with none, which must send every entry and be slower;
* a brute-force search, which must use pipelined reads when there are more
  pages than planes.

Finally it checks that a search of an unknown database raises `err`.

| test | configuration |
|------|---------------|
| `tb_reis_top` | 2×2×2 SSD, 2048 entries, 16 clusters, top-4, all four searches |
| `tb_anns_engine` | 2×2×2 SSD, 1024 entries, 8 clusters, top-3 |
| `tb_reis_full` | the default 8×16×2 SSD with tR = 22.5 µs and top-10; 4096 entries, one IVF search with all optimisations |

The full-size test is slow to build, not to run: Verilator's C++ compile of
the 512-die model took about 14 minutes on an 8-thread machine, and the
simulation itself about 20 seconds (deployment ends near cycle 197 000, the
search takes about 296 000 cycles).
