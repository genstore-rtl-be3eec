# GenStore read filter logic in SystemVerilog

Genome read mapping spends most of its time on reads that either match the
reference genome exactly or do not match it at all. GenStore moves a cheap
filter for such reads into the SSD that holds the read set: the SSD streams the
reads past small accelerators at its full internal flash bandwidth and sends
only the reads that really need full read mapping to the host. Two filters
exist:

* **GenStore-EM** (exact match, short reads). Reads and all read-sized
  reference k-mers are stored as two tables sorted by a fingerprint (a hash of
  the sequence). One comparator merges the two sorted streams; a read whose
  fingerprint appears in the k-mer table matches the reference exactly and is
  finished inside the SSD.
* **GenStore-NM** (no match, long reads, or reads from samples distant from
  the reference). For each read, minimizer seeds are looked up in a hash-table
  index held in the SSD's DRAM. A read with too few seeds cannot align and is
  dropped; a read with very many seeds almost surely aligns and goes to the
  host; the rest are chained, and only reads with a good chain go to the host.

This repository holds synthesizable RTL for the logic of one 8-channel SSD:
the SSD-level accelerator (comparator, hash units, control, batch buffers) and
one channel-level accelerator per flash channel, with self-checking
testbenches for every unit and for the whole design.

## Architecture

```
                 host command / counters
                          |
                     gs_control  ---- accelerator mode, start, done
                          |
   data fetching    +-----------+-----------------------------+
   (SRTable, SKIndex|  GenStore-EM                             |
    batches)  ----> |  gs_batch_buffer x2 --> gs_em_filter --> per-read result
                    +------------------------------------------+
   channel 0 bases ---> gs_ch_acc[0] --+-- KmerIndex DRAM port 0 --> verdict 0
   channel 1 bases ---> gs_ch_acc[1] --+-- KmerIndex DRAM port 1 --> verdict 1
        ...                            |
   channel 7 bases ---> gs_ch_acc[7] --+-- KmerIndex DRAM port 7 --> verdict 7
                                       |
                         gs_hash_acc x2 (each shared by 4 channels)
```

`genstore_top` wires these together. Everything the SSD already has (NAND
flash, flash controllers, the firmware, the DRAM itself, the host link) stays
outside; its data paths are ports of the top:

| Port group | Direction | Carries |
|---|---|---|
| `cmd_*`, `prep_done`, `state`, `accel_mode`, `done`, `filtered_cnt`, `host_cnt` | host/firmware | start of a job (EM or NM), end of preparation, job status, per-job counts of kept and host-bound reads |
| `sr_wr_*`, `sk_wr_*` | in | SRTable entries `{fingerprint, read ID}` and SKIndex fingerprints, in sorted order, from data fetching |
| `em_res_*` | out | one result per read: read ID and exact-match flag |
| `nm_in_*[c]` | in | per channel: read bases (2 bits), first/last base flags, read ID, end of the channel's reads |
| `mem_req_*[c]`, `mem_rsp_*[c]` | out/in | per channel: burst reads of 64-bit words from the KmerIndex |
| `nm_out_*[c]` | out | per channel: verdict, seed count and best chaining score of each read |
| `ev_*[c]` | out | per-channel activity pulses (minimizer looked up, index miss, seed cap reached) |

All interfaces are valid/ready handshakes, synchronous to `clk`, with an
asynchronous active-low reset `rst_n`. Shared types and constants are in
`rtl/gs_pkg.sv`.

### Job sequence (`gs_control`)

The SSD works as a normal drive until the host starts a job. `gs_control`
then moves IDLE -> PREP -> EM or NM -> DONE -> IDLE. In PREP the firmware
makes room in the DRAM (it writes the logical-to-physical mapping table back to
flash and loads the filter's metadata) and raises `prep_done`. On entering EM
or NM, `start` pulses once so the filters clear any state from the previous
job. The EM state ends when the comparator reports that the last read has been
decided; the NM state ends when every channel has. `done` pulses as the SSD
returns to regular mode. Throughout, the unit counts reads kept in the SSD and
reads sent to the host.

## GenStore-EM: merging two sorted tables

### Data

* **SRTable**: one entry per read, `{fingerprint[63:0], read_id[31:0]}`,
  sorted by fingerprint (16 bytes per entry in flash).
* **SKIndex**: the fingerprint of every read-length substring of the
  reference, sorted, duplicates removed (8 bytes per entry).

### Comparator (`gs_em_filter`)

Two pointers walk the tables. Each cycle one 64-bit three-way compare of the
current read fingerprint `r` and k-mer fingerprint `k` decides:

| Compare | Meaning | Action |
|---|---|---|
| `r == k` | the read occurs in the reference | report the read as exact; advance the read pointer |
| `r > k`  | this k-mer matches no remaining read | advance the k-mer pointer |
| `r < k`  | no k-mer can match this read | report the read as not exact (host); advance the read pointer |

Only the read pointer moves on a match, so several reads with the same
fingerprint (duplicates in a read set) all match. Once the last k-mer has been
passed, every remaining read is reported as not exact. Each cycle consumes one
read or one k-mer, so a job takes at most (reads + k-mers) compare cycles once
data is available. Results are registered and held until taken.

### Batch buffers (`gs_batch_buffer`)

Flash delivers data in batches: one multi-plane read on every die of the SSD,
8 channels x 4 dies x 2 planes x 16 KiB = 1 MiB. Each table has a buffer of two
batch slots (65,536 SRTable or 131,072 SKIndex entries each). Data fetching
fills one slot while the comparator drains the other. A slot is handed over
when it is full or when the entry flagged as the table's last arrives; when
both slots hold unread batches, `wr_ready` falls and fetching stalls. The first
entry of a batch reaches the comparator one clock edge after the batch's last
entry was written. Both buffers are flushed while the SSD is in regular mode.

Because a slot is handed over only when complete, the comparator starts once
the first batch of each table is in; after that, fetching and comparing
overlap, and the slower of the two sets the pace.

## GenStore-NM: seeds, counts and chains

Each channel has its own `gs_ch_acc`. A read passes through three steps; two
reads are in flight per channel, one in seed finding and one in counting,
chaining or waiting at the output (see *Overlap between reads* below).

### Step 1: seed finding (`gs_seed_finder`, `gs_kmer_window`, `gs_hash_acc`)

* **k-mers.** Bases arrive at one per cycle. The finder keeps the forward
  k-mer and its reverse complement; from the k-th base on, the smaller of the
  two (the canonical k-mer) plus a strand bit (19 bits for k = 9) is shifted
  into the **K-mer Window**, a 10-entry shift register.
* **Hash.** The canonical k-mer is sent to a shared **hash unit**. It computes
  Thomas Wang's 64-bit integer mix (`hash64`) with shifts, adds and xors in a
  three-stage pipeline; one unit serves four channels through a round-robin
  arbiter, so an 8-channel SSD has two.
* **Minimizers.** The last w = 10 hashes and positions are kept. The k-mer with
  the smallest hash (the oldest one on ties) is the window's minimizer; each
  new minimizer position is looked up once.
* **KmerIndex lookup.** The index is a two-level hash table in DRAM (64-bit
  words). Level 1 has 2^27 buckets at `L1_BASE + (hash mod 2^27)`, each
  `{count[63:48], offset[47:0]}`. If the count is not zero, level 2 holds
  `count` words from `offset`, each a reference end position in bits 31:0.
  A lookup is therefore at most two DRAM requests (one single word, one
  burst). A bucket is assumed to hold a single minimizer, so no key is checked.
* **Seeds.** Each returned position x gives a seed (x, y), y being the
  minimizer's end position in the read, written to the **Location Buffer**
  (64 entries of 64 bits, kept sorted by x with a stable insertion so that
  chaining can walk seeds in reference order).
* **Seed cap.** Bursts are shortened so that no more than N = 64 seeds are
  fetched; after N seeds the remaining bases of the read are consumed without
  lookups.

### Step 2: seed-count filter (`gs_seed_count_filter`)

With c seeds: c < M = 3 drops the read (it cannot reach a minimum chain);
c >= N = 64 sends it to the host without chaining (such reads align with high
probability); otherwise the read is chained.

### Step 3: chaining filter (`gs_chain_filter`, `gs_chain_buffer`, `gs_chain_pe`)

The chaining score of seed i is

```
f(i) = max( w_i , max over the previous H seeds j of  f(j) + alpha(j,i) - beta(j,i) )
dx = x_i - x_j,  dy = y_i - y_j           (j counts only if dx > 0 and dy > 0)
alpha = min(dx, dy, w_i)                  new matching bases
g     = |dx - dy|
beta  = (g >> 3) + (floor(log2 g) >> 1)   gap penalty, shifts instead of multiplies
```

with w_i = k. The **Chaining PE** evaluates one (i, j) pair per cycle,
combinationally, with a 16-bit saturating score. The **Chaining Buffer** holds
the last H = 50 seeds and their scores (50 x (64 + 16) bits) in a circular
buffer addressed by look-back distance. For every seed the filter loads it from
the location buffer, walks back over up to 50 predecessors, and writes f(i)
into the chaining buffer. The read passes, and goes to the host, when the best
f over all seeds is at least TH = 40. A read with n seeds takes
sum over i < n of (2 + min(i, 50)) cycles.

### Verdicts

Each read leaves its channel with one of four verdicts: drop (few seeds), host
(many seeds), host (chain passes), drop (chain fails), together with its seed
count and best score, in read order.

### Overlap between reads

A channel has a single location buffer, yet the steps overlap. When a read's
seeds are complete and the output stage is idle, the read is handed to the
count filter and the seed finder immediately starts on the next read: it takes
bases, builds k-mers, hashes them, picks minimizers and reads level 1 of the
index. Only the level-2 burst, which writes seeds, waits for the location
buffer (`loc_free`). A read decided by its seed count frees the buffer in the
cycle it is handed over; a read that is chained frees it when chaining ends,
and the buffer is cleared then. While one verdict waits at the output, the next
read can be found completely and wait in the seed finder.

## Parameters

| Parameter | Default | Meaning |
|---|---|---|
| `CH` | 8 | flash channels = channel-level accelerators |
| `SR_DEPTH` / `SK_DEPTH` | 65,536 / 131,072 | entries per batch slot (1 MiB / 16 B, 1 MiB / 8 B) |
| `K` | 9 | k-mer length (2 x 9 bits + strand bit = 19-bit window entry) |
| `WIN` | 10 | k-mers per minimizer window |
| `M` / `N` | 3 / 64 | seed-count bounds; N is also the location buffer depth |
| `H` | 50 | predecessors per seed = chaining buffer depth |
| `TH` | 40 | minimum best chaining score of a passing read |
| `IB` | 27 | log2 of the number of level-1 index buckets |
| `L1_BASE` | 0 | DRAM word address of the level-1 table |

The unit counts for `CH` = 8 are one comparator, two hash units, one control
unit, and per channel one K-mer Window, one location buffer, one chaining
buffer and one chaining PE.

## Where this RTL departs from the published design

* **Depth of the pipeline.** The published design runs the three steps
  pipelined without giving the details. Here two reads per channel overlap,
  sharing one location buffer; a read's seed writes wait while the previous
  read is being chained.
* **One K-mer Window per channel.** The published unit list has two per
  channel without saying what the second does; one is used.
* **k = 9.** Only the 19-bit width of a window entry is given; it is read as a
  9-base k-mer plus a strand bit. With so short a k-mer, human-scale indexes
  become very dense (2^18 distinct canonical k-mers); the design targets the
  bacterial and viral references well, the human one poorly. Long reads
  suffer too: a 10,000-base read collects the full N = 64 seeds by chance,
  even against a 12,000-base reference, so every such read goes to the host
  (see `tb_genstore_workloads`).
* **Chaining threshold 40** is taken from common long-read mapper defaults; no
  value is published.
* **Index format.** The word formats, the 2^27 buckets and the DRAM burst
  interface are this design's own. Stored as 64-bit words, a human minimizer
  index would need about 1 GiB + 4.5 GB and so would not fit a 4-GB SSD DRAM,
  whereas the published, packed index is 2.9 GB. Removing minimizers with very
  many locations (the published design drops those above about 500) is left to
  the index builder.
* **Exact-match pointer rule.** Two descriptions exist: one advances both
  pointers on a match, the other only the read pointer. The second is built;
  they differ only when fingerprints repeat.
* **Batch buffer size.** Two slots of 1 MiB per table make 4 MiB; a figure of
  8 MB is also published for the same SSD. The 1-MiB batch that follows from
  the flash geometry is used. The buffers are memory arrays in this RTL; in the
  SSD they live in its DRAM.
* **Seed-count rule.** A read with exactly N seeds goes to the host (the rule
  "at least N"; a "more than N" wording also exists, but with the cap at N
  seeds it could never trigger).
* **Comparator clock.** One compare per cycle; no clock is published for it.
  Keeping up with 8 x 1.2 GB/s of SKIndex data (8-byte entries) would need
  1.2 G compares per second; the chaining PE is specified at 300 MHz.
* **16-channel SSDs** need `CH` = 16 (four hash units are then built) and a
  second comparator, which is not built.

## Verification

Every unit has a self-checking testbench in `tb/` that ends by printing
`TB_RESULT checks=<n> failures=<n>`. Software reference models in
`tb/tb_gs_pkg.sv` (hash64 written with multiplications, minimizer extraction
over a whole read, index construction, the chaining recurrence) are written
independently of the RTL. `tb/tb_kidx_dram.sv` models the DRAM port: bursts
with latency and random request stalls.

| Testbench | What it checks |
|---|---|
| `tb_gs_hash_acc` | hash values against the reference, latency, fair arbitration under contention |
| `tb_gs_kmer_window` | window contents and count against a queue model |
| `tb_gs_location_buffer` | sorted, stable insertion; clear; full |
| `tb_gs_seed_count_filter` | all seed counts 0..64 |
| `tb_gs_chain_pe` | scores against the reference formula, saturation |
| `tb_gs_chain_buffer` | look-back reads against a model, wrap-around |
| `tb_gs_chain_filter` | best score and pass flag of random seed sets; cycle count |
| `tb_gs_em_filter` | results against a set-membership model with gaps and backpressure; one compare per cycle |
| `tb_gs_batch_buffer` | order and end flags through both slots, hand-over latency, writer stall, flush |
| `tb_gs_seed_finder` | seeds and seed counts against the software model; index misses, seed cap, hash contention |
| `tb_gs_ch_acc` | all four verdicts, seed counts and scores against the model; end of stream |
| `tb_gs_control` | state sequence, pulses, waiting for all channels, read counters |
| `tb_genstore_top` | whole design at default parameters: an EM job over 150,000 reads and 150,000 k-mers (several batches, writer stalls), then an NM job over 96 reads on 8 channels; every result and both counters checked; each mechanism must occur at least once |
| `tb_genstore_workloads` | whole design at default parameters over the evaluated mixes, scaled down: EM with 75 %, 80 % and 85 % exact-match reads (20,000 reads, 40,000 k-mers each), then NM with 10,000-base reads of which 1 or 9 of 24 come from the reference; all results and counters checked, reads kept per job printed |

Run one with Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_genstore_top \
    -y rtl -y tb +libext+.sv rtl/gs_pkg.sv tb/tb_gs_pkg.sv tb/tb_genstore_top.sv
./obj_dir/Vtb_genstore_top
```

The full-size top-level test runs in well under a minute of simulation.

## Files

`rtl/` holds one module or package per file: `gs_pkg` (types, constants,
`hash64`), the units listed above, their two compositions `gs_ch_acc` and
`genstore_top`. `tb/` holds the testbenches, the reference-model package and
the DRAM model. Each file starts with a description of what it does, its
interface and timing, and which parts follow the published design and which
are choices made here.
