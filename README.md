# A bandwidth-frugal DRAM cache for GPU memory stacks with storage-class memory

GPUs run out of memory capacity long before they run out of memory bandwidth
ideas. One way out is a *heterogeneous memory stack* (HMS): a 3D stack in which
ordinary DRAM dies sit below phase-change (storage-class, SCM) dies, and each
channel's bus reaches both. SCM holds about four times more per die, but it
opens a row roughly ten times slower than DRAM (tRCD 120 vs. 14 cycles) and
recovers from a write sixty times slower (tWR 1000 vs. 16). The DRAM rank
therefore works as a large cache in front of the SCM rank.

The catch is bandwidth. The cache and its backing store share one bus, so each
extra access costs bus time directly: a tag probe, a fill, a victim write-back,
a metadata update. This RTL implements the controller logic that keeps those
extra accesses rare:

* **Tags next to the data, all in one column.** The tags of the eight lines of
  a DRAM row are packed into the row's last 32 B column. One column read
  brings in the tags of 2 KiB of cache.
* **A tag cache that borrows L2 ways.** Up to four of the sixteen L2 ways hold
  those packed tags, four bytes per DRAM row. Most lookups then need no DRAM
  access at all.
* **A bypass policy that knows SCM is slow.** It fills a missed line into DRAM
  only when it pays off. It caches lines whose SCM access would be expensive
  per byte moved: few columns touched per row opening, or writes involved. It
  also favours lines that are hot.
* **Power throttling and flexible use.** When the stack gets too hot, SCM
  timing is stretched. Small workloads can use DRAM as plain memory instead
  of a cache. The SCM can run as SLC, MLC or TLC.

Everything is SystemVerilog-2017. It is synthesizable except the testbenches
and the memory-die model in `tb/`.

## Geometry and address map

All of these are per channel.

| item | value |
|---|---|
| ranks on the bus | rank 0 = DRAM (the cache), rank 1 = SCM |
| banks per rank | 16 (4 bank groups x 4) |
| row | 2 KiB = 64 columns |
| column | 32 B, one bus cycle (128-bit bus, burst of 2, DDR, 1 GHz) |
| cache line | 256 B = 8 columns; 8 lines per row |
| mapping | direct-mapped; the SCM rank is 4x the DRAM rank, so the tag has 2 bits |
| DRAM rank | 512 MiB (2^18 rows) |
| SCM rank | 2 GiB |

The 512 MiB DRAM size is this design's choice; the source work gives only the
4:1 ratio. The controller works on 32 B sector addresses of 26 bits:

```
 25 24 | 23 ............ 6 | 5 4 3 | 2 1 0
  tag  |  DRAM row (18 b)  | line  | column
                     bank = DRAM row[3:0]
```

The DRAM location of a line is (bank = row[3:0], row-in-bank = row[17:4],
column = {line, column}). Its SCM location is the same with the 2-bit tag put
on top of the row-in-bank. So each DRAM row caches lines from four SCM rows,
and a line can only live in its own slot.

## The metadata column (AMIL)

Column 63 of every DRAM row (line 7, column 7) holds no data. Its first bytes
hold the row's metadata (`amil_codec`):

| bytes | content |
|---|---|
| 0-3 | 8 x 4 bits: `{tag[1:0], valid, dirty}` of lines 0..7 (line *i* in nibble *i*) |
| 4-5 | 8 x 2 bits: DRAM-affinity level of lines 0..7 |
| 6-31 | unused |

The tag bytes and the affinity bytes are updated with separate byte-masked
writes. Neither update needs a read-modify-write of the column. The field
sizes come from the source work; the byte and bit positions are this design's.

Because this column holds metadata, the SCM data that would map to it can
never be cached. Requests for that sector always go straight to SCM. That is
1/64 of the address space.

## Serving a request: the channel controller

`hms_channel` is the heart of the design. L2 misses arrive as 32 B sector
reads and writes with an id. They enter a 128-entry MSHR (`dc_mshr`), which
groups them by 256 B line. A later request to a line that is already waiting
joins its entry, so the controller sees, per line, which columns are read and
which are written. A request for a column that is already pending in its
line's entry waits at the input, which keeps per-address order. Writes are
acknowledged as soon as the MSHR takes them.

The controller serves the oldest entry through a sequence of *phases*. A
phase issues one memory-controller request per selected column, then waits
until every one of them has completed. The sequence for a line is:

1. **Tag lookup.** The tag cache is looked up with the line's DRAM row.
   * On a hit, the row's eight tags come from the tag cache.
   * On a miss, the tag-cache line that will be replaced may hold dirty
     sectors. Each one is first written back into its own row's metadata
     column with a 4-byte masked write. Then the metadata column of this row
     is read (the *probe*), and its tags are installed in the tag cache. The
     probe also brings in the eight affinity levels.
2. **Hit** (the line's slot is valid and its tag matches).
   * Read columns are read from DRAM and returned to L2.
   * Write columns are written to DRAM.
   * The column of the metadata slot, if requested, goes to SCM.
   * A first write sets the line's dirty bit. This update goes to the tag
     cache, or to the metadata column when there is no tag cache.
   * The hit's SCM penalty score feeds the channel's moving average.
3. **Miss.** The demand reads are served from SCM first, so L2 gets its data
   without waiting for the cache. Then the bypass policy decides.
   * **Bypass at level 1.** The miss is not worth caching. Its writes go to
     SCM and the line is done; no DRAM access happened.
   * **Level 2.** The victim's affinity level is needed. If the tag came from
     the tag cache, the metadata column is read now. Tag-cache sectors carry
     no affinity bits.
     * If the victim wins, the miss bypasses: its writes go to SCM.
       The victim's level may be decremented, which is one masked write to
       bytes 4-5.
     * If the new line wins, it is filled:
       1. The remaining columns are read from SCM.
       2. The new write data is merged in.
       3. A dirty victim is read from DRAM and written to SCM.
       4. The new line is written to DRAM.
       5. Its tag and affinity level are stored.
4. **Done.** The MSHR entry is released.

The read responses of one line come back in column order. Lines are served one
at a time, so responses of different lines never overtake each other either.
`stats` counts every path: tag-cache hits, misses and write-backs, affinity
probes, read and write hits, misses, both bypass levels, fills, victim
write-backs, level decrements, last-column accesses and flat-mode lines.

### Why the phases wait

A phase ends only when all of its accesses have finished. That one rule
gives the ordering guarantees:

* A dirty victim is read before the fill overwrites it.
* A tag write-back lands before the probe of a row that shares its tag-cache
  line.
* SCM write-backs are in place before a later line can read them.

The cost is latency. Only one line is in service per channel, so
line-level parallelism comes only from the memory controller's queue within a
phase.

## The bypass decision

Two scores drive it (`scm_penalty_unit`, `act_counter`, `bypass_policy`).

**SCM penalty score.** This is the extra row-opening time that serving the
line from SCM instead of DRAM costs, spread over the columns the line's
requests touch:

```
penalty = (tRCD_SCM - tRCD_DRAM)                       / columns    (reads only)
penalty = (tRCD_SCM - tRCD_DRAM + tWR_SCM - tWR_DRAM)  / columns    (with a write)
```

With the MLC timing, the numerators are 106 and 1090 cycles. A line touched
in one column with a write scores 1090; eight columns of reads score 13. The
numerators follow the current SCM timing, so throttling and the cell mode
change them.

**DRAM-affinity score.** This is the penalty multiplied by the activation
count of the line's 2 MiB page, which adds hotness. The counters are 8 bits,
one per page, and count activations of both ranks. On saturation, every
counter of the channel is halved. A 3-bit register remembers the pending
halvings while a background sweep applies them one counter per cycle; a
counter not yet swept already reads as halved. The counters can be switched
off (`cfg_act_en = 0`), which makes every count 1. That is how the source work
evaluated the design.

**Levels.** Both scores are turned into one of N = 4 levels, between 0 and
the largest value seen so far:

```
level = min(3, floor(4 * score / max_seen))
```

Discretising keeps small jitter in the scores from flipping decisions.

**Level 1.** A miss is bypassed unless its penalty level is strictly greater
than the level of the channel's moving-average penalty. This test costs no
DRAM access, and it filters most misses.

**Level 2.** An invalid victim is simply replaced. A valid victim is replaced
only if the miss's affinity level is strictly greater than the victim's stored
level. Otherwise the miss bypasses, and the victim's level drops by one with
probability p_dec = act_count(page) / act_max. A hot line that bypasses thus
erodes the victim's claim faster.

**Moving average.** The moving average of the penalty score gives a new
sample a weight of 1 %. It is kept in fixed point with 8 fraction bits and fed
by the hits. Its level is recomputed every F_UPDATE = 100 updates. The source
work computes these scores with an FPU; the fixed-point version here avoids
one.

## The configurable tag cache

`ctc` models the L2 ways lent to the tag cache. Per L2 slice (one per
channel) it has 512 sets (an 8 MiB, 16-way, 128 B-line L2 split over 8
channels). Each borrowed 128 B L2 way holds four 32 B tag-cache ways. Each
tag-cache line has eight 4 B sectors, and each sector holds the tags of one
DRAM row. Eight consecutive DRAM rows (a *group*) therefore share one
tag-cache line:

```
group = DRAM row >> 3     sector = DRAM row[2:0]
set   = group mod 512     line tag = group / 512   (22 bits in the full-size L2)
```

Each line carries a valid and a dirty bit per sector. A lookup hits only if
the line is present and its sector is valid.

Each set keeps 4 bits of replacement state: the most recently used way.
On a fill, the victim is chosen in this order:

1. the line already present (only a new sector is added), else
2. the first invalid enabled way, else
3. the way after the most recent one (round robin over the enabled ways).

`cfg_ctc_ways` selects 0 to 4 L2 ways, that is 0 to 16 tag-cache ways. With 0,
or in flat mode, every lookup misses. The controller then keeps the metadata
only in DRAM and writes each tag change there directly. Change the way count
only when the tag cache holds no dirty sectors.

## Memory controller and timing

`mem_ctrl` schedules both ranks of the channel on one bus, with one command
per cycle. Column requests wait in an 8-entry queue that keeps them in age
order. The scheduler is first-ready, first-come-first-served:

1. The oldest request that hits an open row and is allowed to issue gets its
   RD/WR.
2. Otherwise, the oldest request that can make progress opens its bank (ACT).
3. Or it closes a bank open on another row (PRE), if no queued request still
   wants that row.

Rows stay open after use. Per bank the controller enforces ACT->RD/WR >= tRCD,
ACT->PRE >= tRAS, WR->PRE >= tWR and PRE->ACT >= tRP. Read data returns in
order, tCL after the RD.

| timing (cycles at 1 GHz) | CL | RCD | RAS | WR | RP |
|---|---|---|---|---|---|
| DRAM | 14 | 14 | 33 | 16 | 14 |
| SCM, MLC (default) | 14 | 120 | 120 | 1000 | 14 |
| SCM, SLC | 14 | 60 | 60 | 150 | 14 |
| SCM, TLC | 14 | 250 | 250 | 2350 | 14 |

The resulting latencies, from accepting a request to its data:

| access | DRAM (cycles) | SCM MLC (cycles) |
|---|---|---|
| row hit | about 15 | about 15 |
| closed bank | about 29 | about 135 |
| row conflict | about 43 | about 149 |

The testbench checks all of these. Refresh, tCCD, tFAW, tRTP and bus
turnaround are not modelled.

`scm_timing` holds the timing set for `cfg_scm_mode`. It doubles tRCD
(`cfg_throttle_act`) and/or tWR (`cfg_throttle_wr`) while `temp` exceeds
`temp_limit`. Throttling turns off again only 2 degrees below the limit.

## Flat mode

With `cfg_flat = 1`, DRAM is memory, not a cache:

* Lines with tag 0 live in DRAM; the other three quarters of the address
  space live in SCM.
* No tags are kept, and the tag cache is off (its ways return to L2).
* A line's reads go out first, then its writes.

Small working sets can then run almost entirely from DRAM. Switch modes only
when the channel is idle and the memories hold no data you still need.

## Module map

```
hms_top                 NUM_CH channels, shared configuration, per-channel temperature
 └─ hms_channel         DRAM-cache controller of one channel (the phase FSM)
     ├─ dc_mshr         per-line request merging, FIFO service
     ├─ ctc             tag cache in borrowed L2 ways
     ├─ amil_codec (x2) metadata column pack/unpack, masked-write builders
     ├─ scm_penalty_unit
     ├─ act_counter
     ├─ bypass_policy
     ├─ scm_timing      cell mode and throttling
     └─ mem_ctrl        FR-FCFS scheduler for the shared DRAM+SCM bus
hms_pkg                 widths, structs (requests, commands, metadata), timing sets
```

`hms_top` ports are arrays indexed by channel:

* **L2 side:**
  * `l2_req_valid/ready` and `l2_req` (struct `l2_req_t`: write, 26-bit
    sector address, 256-bit data, 8-bit id);
  * `l2_rsp_valid` and `l2_rsp` (id and read data);
  * `wr_ack` and `wr_ack_id`.
* **Memory-die side:**
  * `dev_cmd` (struct `dev_cmd_t`: ACT/RD/WR/PRE, rank, bank, row, column,
    byte mask, data);
  * `dev_rvalid`, `dev_rdata` (data expected tCL cycles after RD).
* **Configuration:** the `cfg_*` inputs, shared by all channels.
* **Status:** `temp` in per channel; `throttling`, `idle` and `stats` out.

The L2 slices, the memory dies and the temperature sensor are outside the
design.

## Simulating

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/hms_pkg.sv rtl/amil_codec.sv rtl/scm_penalty_unit.sv rtl/act_counter.sv \
  rtl/bypass_policy.sv rtl/ctc.sv rtl/dc_mshr.sv rtl/scm_timing.sv rtl/mem_ctrl.sv \
  rtl/hms_channel.sv rtl/hms_top.sv tb/hms_dev_model.sv tb/tb_hms_top.sv \
  --top-module tb_hms_top -Mdir obj && obj/Vtb_hms_top
```

For a single block, list only `hms_pkg.sv`, the block and its testbench.

| testbench | what it establishes |
|---|---|
| `tb_amil_codec` | every field position of the metadata column, both masked writes |
| `tb_scm_penalty_unit` | scores for 1..8 columns, reads/writes, MLC/SLC, throttled tWR |
| `tb_act_counter` | counting, maximum, halving sweep against a reference |
| `tb_bypass_policy` | both levels, invalid victim, p_dec 0 / 1 / 1/4, average level |
| `tb_ctc` | sector hits, line sharing, victim choice, dirty sectors, 0 ways |
| `tb_dc_mshr` | merging, hold on a repeated column, full, order, busy entry |
| `tb_scm_timing` | three cell modes, doubling, hysteresis |
| `tb_mem_ctrl` | data, hit/miss/conflict latencies, FR-FCFS reordering, no timing violation |
| `tb_hms_channel` | random traffic against a reference memory in six configurations; every controller path must occur |
| `tb_hms_top` | 2 channels concurrently, cache and flat mode, all paths |
| `tb_hms_full` | the default 8-channel design, every parameter at its default |

`tb/hms_dev_model.sv` is a behavioural model of the memory dies. It checks
the bank protocol and the timing of every command, and it counts violations.
Every testbench that uses it requires zero. Unwritten SCM reads return a
pattern computed from the address:

```
word i (0..7) = {addr[23:0] ^ (i * 0x9E3779), i[7:0]} ^ 0xA5A50000
```

Testbenches can predict that content without a table.

The channel and top testbenches shrink the MSHR to 8 entries and the tag
cache to 4 sets. The address pool is also small, so lines and tag-cache lines
collide constantly. All mechanisms then show up within a few thousand
requests: fills, write-backs, both bypass levels, level decrements, MSHR
back-pressure and throttling.

## How far to trust it, and where it departs

These parts follow the source design:

* the shared two-rank channel;
* the 256 B direct-mapped lines with 2-bit tags;
* tags and affinity levels in the last column;
* the last-column bypass;
* the tag cache's geometry (4 B sectors, 8 rows per 32 B line, 4 tag-cache
  ways per L2 way, up to 4 L2 ways, 22-bit tags);
* the penalty formula and its two pre-computed numerators;
* the 8-bit activation counters on 2 MiB pages, with shift-based halving;
* N = 4 levels, F_UPDATE = 100 and the 1 % average weight;
* the two-level decision with p_dec;
* the 128-entry MSHR;
* doubling tRCD/tWR for throttling;
* the three cell modes' timing and the timing tables;
* FR-FCFS;
* 8 channels.

These are this design's own choices:

* **Sizes not given:** 512 MiB DRAM and 2 GiB SCM per channel, 512 tag-cache
  sets, the 8-entry controller queue, the temperature width and hysteresis.
* **Metadata bit positions:** field sizes are given; positions are not.
* **Replacement state:** the 4 bits per set are used as "most recently used
  way, evict the next". The source names a 4-bit pseudo-LRU without its
  algorithm.
* **Moving average:** fed by hits only. F_UPDATE is read as the interval
  between re-discretisations. The arithmetic is fixed point, not floating
  point. p_dec uses an LFSR.
* **Service:** one MSHR entry in service at a time, with phase barriers. This
  is simple and safe, but it is not a performance-tuned controller.
* **Metadata updates:** byte-masked writes instead of read-modify-write. An
  affinity update always goes through a fresh copy of the levels, because one
  byte holds four lines' levels.
* **Flat-mode address map:** tag 0 in DRAM.
* **MSHR contents:** entries hold L2 ids and write data. The source's 51-bit
  entry describes only the address/mask/state part.

Known gaps:

* In SLC and TLC modes only the timing changes; the smaller or larger
  capacity is not reflected in the address map.
* The tag cache is a separate array, not wired into a real L2's data ways.
* No refresh.
* The memory-die model is behavioural.

The largest configuration simulated is the default one: 8 channels,
128-entry MSHRs and 512-set tag caches, with a few hundred random requests
per channel. It runs in seconds.

## Capacity for typical uses

At the defaults, a system with 8 channels has 4 GiB of DRAM cache and 16 GiB
of SCM.

* GPU benchmarks with footprints of tens to hundreds of MiB fit easily.
* Inference of a 24-billion-parameter model in 16-bit weights (about 45 GiB)
  does not. It needs roughly 40 channels of this size, which is an 80 GiB
  stack.
