# RecFlash RTL: frequency-ordered embedding layout for NAND-flash in-storage inference

Embedding lookups in recommendation models are small and random: one
inference touches tens of vectors of 128–256 bytes each, scattered over
tables with millions of rows. On NAND flash the cost of a read is the array
sense time tR (tens of microseconds), and tR moves a whole 16 KB page into the
plane's page buffer. A random 128 B lookup therefore pays for a whole page and
uses less than 1 % of it.

The design here makes page reads count. It rests on four ideas:

1. **Frequency-ordered layout.** Vectors are placed in NAND in descending order of
   access count. The hot vectors then share a few pages, and one tR serves many lookups.
2. **Plane distribution.** Consecutive hot pages go to different planes, so every
   plane's page buffer holds hot data at the same time.
3. **Page-wise cache.** Whole pages are kept in controller SRAM and replaced LRU.
4. **Cheap online re-layout.** When online training changes which vectors are hot,
   the mapping table is not re-sorted. It is kept as a linked list in frequency
   order, and new hot keys are linked into the hot region only. A comparator and a
   pointer updater do this work in hardware.

The RTL covers the part of an SSD controller that sits between the host's lookup
requests and one NAND channel: the mapping table, lookup sequencing, the page
cache, the NAND channel controller, the sum-pooling unit, the mapping-table
update engine and the online-training trigger. The NAND dies, the DRAM, the
PCIe/NVMe front end and the firmware CPU are not RTL. A behavioural NAND die
model in `tb/` stands in for the dies.

## Why a page read is the unit of cost

A NAND read has three stages:

| stage | what happens | cost here (500 MHz clock) |
|---|---|---|
| C/A | `00h`, 2 column + 3 row address cycles, `30h` | 7 × tWC = 7 × 20 ns |
| page read | array → page buffer; R/B# low | tR (25 / 60 / 140 µs for SLC / TLC / QLC) |
| data out | tRR, then one byte per RE# cycle | tRR + N × tRC (20 ns each) |

Data out is 2.6 µs for a 128 B vector over an 8-bit bus, which is small next to tR.
If a page is still in its plane's page buffer, a read can skip tR. The
controller then sends a change-read-column command (`06h`, five address cycles,
`E0h`) and streams the bytes. Two vectors on the same page thus cost one tR, not
two. `nand_channel_ctrl` remembers the open page of every plane and takes this
short path automatically. It reports `ev_page_read` or `ev_pb_hit` for every
request.

### Multi-plane page reads

Every plane has its own page buffer, and a die can sense one page in each plane
during the same tR. With `mp_en` high, the controller turns each page read into
a multi-plane read of the same page index on all four planes:

1. For each of the other three planes: `00h`, address, `32h`, then wait
   while R/B# shows the die's short busy time (tDBSY).
2. For the requested plane: `00h`, address, `30h`.
3. Wait one tR.
4. Send `06h`, address, `E0h` to select the requested plane's buffer, then
   stream the data.

The extra cost per page read is 3 × 7 + 7 bus cycles (about 0.6 µs) plus
three tDBSY. The
payoff comes from the layout below: rank groups 4k … 4k+3 sit on page k of
planes 0–3. After one miss in such a group, misses to the other three pages
are page-buffer hits. The end-to-end test shows it directly: four cold pages
on the same page index cost one tR and three buffer hits.

## Layout: rank → {plane, page, slot}

`remap_addr_gen` turns a vector's rank in the frequency order into a physical
address `paddr_t = {plane, page, slot}`:

```
slots_per_page = PAGE_BYTES / (4 · 2^dim_log2)     (128 for dim 32 on 16 KB pages)
group = rank / slots_per_page                      (which page, counting globally)
plane = group mod 4                                (round robin over planes)
page  = base_page + group / 4
slot  = rank mod slots_per_page
```

The hottest `slots_per_page` vectors fill page 0 of plane 0. The next ones fill
page 0 of plane 1, then plane 2, then plane 3, then page 1 of plane 0, and so on.
For two vectors per page the first four ranks land on planes 0, 0, 1, 1, which
is the ordering the original method's example shows. Every split is a shift or a
mask, so the block is purely combinational. `paddr_row()` in `recflash_pkg`
turns an address into the NAND row `{page, plane}` the channel controller sends.

## The page-wise cache

`page_cache` holds `CACHE_BYTES / PAGE_BYTES` whole pages in a 32-bit
single-port SRAM: 8 lines of 16 KB in 128 KB by default. It works as follows:

- The cache is fully associative. A line's tag is the NAND row.
- Hit detection and victim choice are combinational. The victim is an invalid
  line if there is one, otherwise the least recently used line.
- LRU is kept as a rank per line. On a touch, the touched line gets rank 0 and
  the younger lines age by one.

`lookup_ctrl` sequences one lookup as follows:

1. Read the mapping-table entry (one cycle) to get `{plane, page, slot}`.
2. Look up the page in the cache.
   - **Hit:** touch the line.
   - **Miss:** request the whole page from the channel controller and pack the
     bytes little-endian into the victim line. Then validate the line.
3. Read the vector's `2^dim_log2` words from the line and stream them into
   `sls_unit`, marking the first and last vectors of the bag.

`sls_unit` keeps one accumulator per element. It loads on the first vector of
a bag and adds on the rest. The finished sums stream out one cycle behind the
last vector.

A hit costs 4 + dim cycles. A miss adds one NAND read of a full page, which
skips tR when the plane still holds that page. Be aware of the size of that
read: at one byte per 20 ns, a 16 KB fill takes about 328 µs, roughly five TLC
tR. The cache pays off only when a cached page serves many lookups, which is
what the frequency-ordered layout aims for.

## Re-layout after online training (the hard part)

### The data structure

Each `mapping_table` entry (`ht_entry_t`, 106 bits) holds:

- `cnt`: the access count;
- `addr`: the physical address;
- `prev`, `next`: links to the neighbouring vector IDs. The MSB of a link set
  means NIL.

The links chain all entries into one list in descending count order. Head and
tail pointers live in `pointer_updater`. The first `hot_len` entries form the
**hot region**, the top x % (for example 5, 10 or 15 %). The last entry of that
region is the **threshold key τ**.

### What has to happen

Online training yields new keys with counts. A new key that beats some hot
entry must enter the hot region at the right place, and one key must leave the
region so that its size stays fixed. A new key that beats no hot entry is cold.
Only the hot region is searched, never the whole million-entry table.

### The engine (`ht_update_engine`)

The engine has two helpers. `hot_comparator` is one strict `>` compare.
`pointer_updater` does the list edits. It runs these steps:

- **Find τ.** Walk `hot_len − 1` `next` links from the head. Keep τ and its
  predecessor τ_prev, and latch τ's count on `tau_cnt`.
- **Insert each new key**, taken from the `nk_*` stream:
  1. Scan from the head. For each entry, read it (one-cycle table read) and
     compare its count with the new key's. The scan costs 2 cycles per entry
     compared.
  2. If the new key is greater, `pointer_updater` inserts it before that entry.
     Then τ is moved to the list tail, with a fresh address in cold space, and
     reported with kind 1 (retired hot key). τ_prev becomes the new τ. One
     table read of it gives its count and its `prev` link, the new τ_prev.
  3. If the scan reaches τ with no insertion point, the key is appended at the
     tail with a cold address, reported with kind 2 (new cold key).
- **Reassign hot addresses.** Walk the hot region once more. Give the entry at
  rank r the address `remap_addr_gen(r, hot_base_page)`. Report every hot key
  with kind 0, including keys that stay in the same place. Inserted keys carry
  the placeholder address 0 until this step.

Every address change leaves on the `rm_*` stream as (key, old, new, kind) with
valid/ready. The consumer, the firmware, copies vectors in NAND accordingly:

- kind 0: hot key moved to a new rank page;
- kind 1: retired hot key moved to cold space;
- kind 2: new key placed in cold space, with no old copy.

Cold space is handed out in order from `cold_base_page`, using the same packing
as the hot region.

### The pointer updater's edits

Each edit is a short sequence of read-modify-writes on the single table port.
The port has one-cycle reads.

| op | edit | cycles |
|---|---|---|
| `OP_INSERT` n before p | read p, write n, patch p.prev's `next` (or head), patch p | 5 (3 if p is the head) |
| `OP_APPEND` n | patch old tail's `next`, write n, move tail | 3 (1 into an empty list) |
| `OP_MOVE` x to tail | read x, unlink from neighbours, patch old tail, rewrite x (optionally with a new address) | ≤ 10 |

While the pointer updater is busy it owns the table port. Otherwise the engine's
scan owns it.

### Preconditions

- New keys must not already be in the list.
- `hot_len ≥ 1`.
- The list must be loaded, with entries written by the host and `list_load`
  giving head and tail.

The testbench checks each remap report against a reference model of the
algorithm, written as a queue.

## Deciding when to re-train (`trigger_unit`)

During serving, firmware keeps a separate table of access counts for the
online-training data. It streams those counts in on `oc_*`, one key per cycle.
`trigger_unit` compares each count with the count of the current threshold
key (`thr_cnt` at the top), and counts the keys above it (`hot_seen`) and all keys
(`rows_seen`). At `period_end` the trigger decision depends on the policy:

- **Threshold policy:** fires if `hot_seen · 1000 > rows_seen · 1`, that is if
  more than 0.1 % of the online keys would be hot.
- **Period policy:** fires every period, for example daily.

The counters then restart. The ratio is set by `FRAC_NUM / FRAC_DEN`.

## Top level (`recflash_top`)

The top connects all blocks around one mapping table and one NAND channel. A
`mode` input decides who owns the table port. Change the mode only when nothing
is in flight.

| mode | owner | ports |
|---|---|---|
| `MODE_HOST` | host/firmware | `h_req/h_we/h_addr/h_wdata/h_rdata`, `list_load/load_head/load_tail` |
| `MODE_SERVE` | lookup path | `lk_valid/lk_ready/lk_key/lk_last` into a 16-deep queue; results on `res_valid/res_idx/res_data/res_last` |
| `MODE_UPDATE` | update engine | `upd_start, hot_len, hot_base_page, cold_base_page`, `nk_*` in, `rm_*` out, `upd_busy/upd_done/tau_cnt` |

The trigger ports (`policy`, `oc_*`, `period_end`, `trigger`) work in every
mode. The threshold count they compare against (`thr_cnt`) is loaded by the
host with `thr_set/thr_value` for the offline table, and replaced by τ's
count at the end of every update.

`mp_en` turns multi-plane page reads on or off; it may change between
lookups. `dim_log2` (0–6) sets
the vector size to 1–64 32-bit elements.

The NAND side is one ONFI-style 8-bit channel: `nand_ce_n`, `nand_cle`,
`nand_ale`, `nand_we_n`, `nand_re_n`, `nand_io_out/nand_io_oe/nand_io_in` and
`nand_rb_n`.

The `st_*` outputs count lookups, cache hits and misses, NAND page reads and
page-buffer hits. They also count the inserted and appended keys and the
compares of the last update. `trig_hot/trig_rows` give the counts of the period
that just ended.

Typical sequence:

1. In host mode, write the offline-built table entries, `list_load`, and set
   the threshold count.
2. Serve bags.
3. At each period end, watch `trigger`.
4. On a trigger, after training, switch to update mode, stream the new keys and
   drain `rm_*`.
5. Return to serve mode.

## Where this design departs from the original method

- **One NAND channel, in-order serving.** The original architecture has several
  channels, and plane parallelism is an intended benefit. Here the lookup
  controller serves one lookup at a time, so a miss blocks later hits. Plane
  parallelism is taken only through the multi-plane page read: planes share
  one tR, but their data-out streams are never overlapped with other work.
  The multi-plane command sequence is this design's choice, since the original
  names no command.
- **Planes.** The layout spreads over 4 planes (`PLANE_W = 2`), as in the
  method's illustration. The evaluated NAND parts have 2 planes per die, so 4
  planes here correspond to two dies on the channel, or to a 4-plane part.
  `PLANE_W` is a package constant.
- **The table is direct-indexed.** The vector ID is the table index. The original
  uses a hash table in DRAM, with an unspecified hash. One instance holds 2^20
  entries, which is one 1M-row table. Multi-table models need one table region
  per embedding table, which is not built.
- **Retired hot keys move to cold space.** The original's step 4 keeps old
  addresses for keys below the hot region. Its prose says retired hot items go
  to free cold space. This design follows the prose, because otherwise a retired
  key would keep an address inside the freshly rewritten hot pages.
- **No serving during an update.** The original keeps serving inference from
  the baseline table while the hot region is being remapped. Here the mode
  input hands the single table port either to the lookup path or to the update
  engine, so lookups wait until the update is done. Serving alongside would
  need a second copy of the table, or port sharing plus a rule for addresses
  whose data has not been copied yet. Neither is built.
- **The trigger compare is strict (`>`).** The original's text says "greater
  than" and its figure prints "≥"; the text is used.
- **Things left outside.** The NAND program/erase, garbage collection and the
  copy of data for a remap are left to firmware; the RTL only reports what must
  move. Counting online accesses into the training table is also a firmware
  job; the trigger takes the counts as a stream.
- **Number format.** Elements are 32-bit two's complement (no format given).
  Sums wrap.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `N_ROWS` | 1048576 | mapping-table entries (`KEY_W = 20`) |
| `PAGE_BYTES` | 16384 | NAND page (TLC/QLC); 4096 for SLC |
| `CACHE_BYTES` | 131072 | page-wise cache (8 pages) |
| `MAX_DIM` | 64 | largest vector, in 32-bit elements |
| `Q_DEPTH` | 16 | lookup queue depth |
| `T_WC`, `T_RC`, `T_RR` | 10 | NAND bus timings in 2 ns clocks (20 ns) |

tR is not a parameter. The controller waits on R/B#, so any NAND works. Widths
of page, slot, count and links are in `rtl/recflash_pkg.sv`.

## Verification and trust

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. The main checks are:

- `tb_nand_channel_ctrl` checks bus protocol, data and read latency against
  `7·tWC + tR + tRR + N·tRC`. It covers the tR-free path and the multi-plane
  read: one array read, after which the other planes hit, with matching page
  addresses.
- `tb_ht_update_engine` runs random lists and new-key streams against a
  reference model of the insertion algorithm. It checks every remap report and
  the final list. Hot regions of 1, 2, 3 and 10 entries are covered, and
  regions that span the whole list, where τ is the tail.
- `tb_recflash_top` (small parameters) and `tb_recflash_full` (default
  parameters, tR = 60 µs, 8192 keys) run the whole flow against the NAND die
  model: host load, serving bags with golden sums, a directed page-buffer reuse,
  trigger periods, update and re-serving. They print counts of every mechanism,
  for example cache hits, misses, evictions, page reads, page-buffer hits,
  multi-plane reads, inserted, appended and retired keys,
  and triggers.
- `tb_workload_rmc` runs the bag shapes of the three models (RMC1: 80
  lookups of dim 32; RMC2: 120 of dim 64; RMC3: 20 of dim 32). It uses a
  scaled table: 2048 rows, 1 KB pages, an 8-page cache and tR = 3000 cycles.
  Locality is swept over K0–K2 as a unique-access rate of 8 %, 30 % and 66 %.
  A lookup is a new key with that probability, otherwise it repeats a key
  already used in the run. New keys are skewed towards low key ids, and key id
  is the popularity rank. This generator is the testbench's own, because the
  paper does not describe its trace generator; only the 8–66 % range comes from
  the paper. Each case is served three times with the same keys: scrambled
  placement, frequency layout, and frequency layout with multi-plane reads. All
  sums are checked. The frequency layout must never need more page reads, and
  must need fewer in total per model. Page reads summed over K0–K2:

  | model | scrambled | frequency | frequency + multi-plane |
  |---|---|---|---|
  | RMC1 | 231 | 114 | 114 |
  | RMC2 | 455 | 363 | 351 |
  | RMC3 | 43 | 31 | 28 |

What is not verified: timing closure and area at 500 MHz (the RTL has been
simulated, linted and run through generic logic synthesis, which finds no
latches), real NAND parts, and multi-die or multi-channel operation.

## Simulating

All testbenches use only `rtl/` and `tb/`. With Verilator 5:

```sh
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/recflash_pkg.sv tb/recflash_tb_pkg.sv tb/tb_recflash_full.sv \
  --top-module tb_recflash_full -o sim
./obj_dir/sim
```

Replace `tb_recflash_full` with any `tb/tb_*.sv`. Library search (`-y`)
finds the blocks and the NAND die model (`tb/nand_flash_model.sv`). The
full-size run takes about 10 seconds. Its last lines give the mechanism counts
and the `TB_RESULT` line.
