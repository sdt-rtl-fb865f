# SDT resource partitioning: letting a data-delivery thread share a beefy core

Moving network data from the NIC to an application costs CPU cycles. Polling the
NIC, decapsulating headers and handing payload pointers on are the "datacenter
tax". Running that work on a separate core wastes a core and moves every packet
between private caches. Running it as an ordinary SMT sibling splits the core's
resources 50/50, although the delivery thread uses only a small part of them.

The SDT (Simultaneous Data-delivery Thread) design gives each core of a chip
multiprocessor a second hardware thread for data delivery. This thread runs next
to the application (data-processing) thread on the same core and private caches.
The core's shared pipeline structures are split between the two threads
**asymmetrically**, and software can change the split at run time:

| Configuration | code | SDT share | data-processing share | intended for |
|---|---|---|---|---|
| Baseline | 0 | 50 % | 50 % | conventional equal SMT split |
| High intensity | 1 | 10 % | 90 % | compute-heavy application, light network load (about 500 Mbit/s per core) |
| Medium intensity | 2 | 20 % | 80 % | about 4 Gbit/s per core |
| Low intensity | 3 | 40 % | 60 % | network-bound application, about 9 Gbit/s per core |

A software daemon samples the network load, for example every millisecond. It
chooses a configuration and writes it to the hardware with a new instruction,
STRP (Store Resource Partition). The hardware applies the change by flushing the
pipeline, so no entry is left owned by the wrong thread.

This RTL implements that partitioning logic for a 20-core chip: the occupancy
limiters, the STRP/flush sequencer and their replication per core. The
out-of-order cores are not included. Their pipelines, the structures being
partitioned, the caches, the memory and the NIC connect to this logic through
ports.

## Partitioned structures

Eight structures are partitioned in each core. Their default sizes are those of
the reference core: a 12-wide out-of-order core comparable to a large server core.
The SDT limit is `floor(size × share)`. The data-processing thread gets the rest,
so the two limits always add up to the structure size.

| index | structure | entries | SDT limit: Baseline / High / Medium / Low | emptied by flush |
|---|---|---|---|---|
| 0 | issue queue (IQ) | 194 | 97 / 19 / 38 / 77 | yes |
| 1 | load queue (LQ) | 144 | 72 / 14 / 28 / 57 | yes |
| 2 | store queue (SQ) | 112 | 56 / 11 / 22 / 44 | yes |
| 3 | branch target buffer (BTB) | 8192 | 4096 / 819 / 1638 / 3276 | no |
| 4 | reorder buffer (ROB) | 512 | 256 / 51 / 102 / 204 | yes |
| 5 | integer physical registers | 448 | 224 / 44 / 89 / 179 | no |
| 6 | floating-point physical registers | 256 | 128 / 25 / 51 / 102 | no |
| 7 | vector physical registers | 400 | 200 / 40 / 80 / 160 | no |

A delivery thread running DPDK's l2fwd at 90 % of full-core throughput needs about
32 IQ, 32 LQ and 32 SQ entries, 92 integer and 46 vector registers, 256 BTB
entries and a 128-entry ROB. Baseline and Low hold all of these. Medium and High
do not: they are for lower network rates, where the delivery thread needs less.

## How a limiter works (`sdt_partition_unit`)

Each structure has one limiter. For each thread the limiter keeps two registers:

* **limit**: the most entries this thread may hold, loaded from a table of
  constants. The table has one row per configuration and is fixed when the
  design is built.
* **usage**: the entries this thread holds now.

Each cycle, each thread presents two counts. `alloc` is the number of entries it
wants to take and `free` is the number it gives back. Both are 0–12, one
superscalar group. The limiter answers in the same cycle with `grant`, the number
of entries the thread may take:

```
room_thread[t] = max(0, limit[t] - usage[t])
room_struct    = max(0, SIZE - usage[0] - usage[1] - (entries granted to lower threads))
grant[t]       = flush ? 0 : min(alloc[t], room_thread[t], room_struct)
usage[t]      <= usage[t] - free[t] + grant[t]                -- at the clock edge
```

The oldest `grant[t]` entries of the group go ahead; the rest wait and are asked
for again. Allocation therefore proceeds until `usage` equals `limit` and then
stops. `sdt_core_partition` raises `thread_stall[t]` when any structure granted
thread *t* less than it asked for. `blocked[t]` (`usage >= limit`) shows which
threads are full.

The grant is a count rather than yes/no for a reason. With all-or-nothing grants,
a 12-entry group could never enter a partition smaller than 12 entries. The
delivery thread's store queue under High is one: it has 11 entries.

The structure-room term exists because limits can shrink. Suppose the SDT holds
3000 BTB entries under Low and the daemon switches to High, where its limit is 819. The SDT keeps those 3000 entries and
is blocked until it drops below 819. Meanwhile the data-processing thread's limit
has grown to 7373, but only 5192 entries are physically free. The per-thread
check alone would let it over-commit the structure. Thread 0 is checked before
thread 1 within a cycle.

Frees are always accepted. A thread may not free more entries than it holds, and
an assertion checks this.

## Re-partitioning: STRP and the flush (`sdt_repartition_ctrl`)

The STRP operand (`strp_cmd_t`, 10 bits) carries an 8-bit structure mask in bits
[9:2] and a 2-bit configuration in bits [1:0]. Bit *s* of the mask selects
structure *s* in the table above. One STRP can therefore re-partition any subset
of the structures. The core hands the operand over with a valid/ready handshake
when STRP executes.

```
cycle        N-1          N (edge)         N+1                 N+2 (edge)
strp_valid   1 ---------- accepted
strp_ready   1            1                0                   1
flush        0            0                1                   0
cfg_we[s]    0            0                mask[s]             0
limits       old          old              old                 new
queue usage  any          any              any                 0 (IQ, LQ, SQ, ROB)
```

During the flush cycle no allocation is granted. At the edge that ends it, the
selected limiters load their new limits, and the IQ, LQ, SQ and ROB limiters reset
both usage registers to zero. All in-flight instructions were cancelled, so these
structures are empty. The BTB and the register files are not emptied. BTB entries
stay valid, and the registers holding architectural state stay allocated. The
core returns any registers of cancelled instructions through `free`. Re-filling
the pipeline after a flush is the core's job. It is expected to take a few
hundred cycles, which is small next to a re-partition interval of 1 ms.

Draining the pipeline instead of flushing it would keep in-flight work, but it
costs several times more cycles, so it is not built.

## Chip organisation (`sdt_cmp`, top)

`sdt_cmp` contains `NCORES` (default 20) independent copies of
`sdt_core_partition`. Each copy holds one `sdt_repartition_ctrl` and eight
`sdt_partition_unit`s. Every port of the top is an array indexed by core first,
then by structure, then by thread:

| port | dir | shape | meaning |
|---|---|---|---|
| `strp_valid`, `strp_ready` | in / out | `[core]` | STRP handshake |
| `strp_cmd` | in | `[core]` of `strp_cmd_t` | STRP operand |
| `flush` | out | `[core]` | one-cycle pipeline flush |
| `thread_stall` | out | `[core][thread]` | some structure granted the thread less than it asked for |
| `req` | in | `[core][struct][thread]` of `part_req_t {alloc, free}` | 4-bit counts |
| `grant` | out | `[core][struct][thread]` of 4 bits | entries granted this cycle |
| `blocked` | out | `[core][struct][thread]` | `usage >= limit` |
| `usage`, `limit` | out | `[core][struct][thread]` of 14 bits | the registers |
| `cur_cfg` | out | `[core][struct]` of `part_cfg_e` | current configuration |

Thread 0 is the data-processing thread and thread 1 is the SDT (`TID_PROC` and
`TID_SDT` in `sdt_pkg`). Reset is asynchronous and active low. It puts every
structure of every core in the Baseline configuration with zero usage.

The logic is small. After synthesis the whole 20-core top has about 9,400
word-level cells and 9,500 flip-flops, or roughly 475 flip-flops per core.

## Files

| file | contents |
|---|---|
| `rtl/sdt_pkg.sv` | thread and structure indices, sizes, configuration enum and shares, `strp_cmd_t`, `part_req_t` |
| `rtl/sdt_partition_unit.sv` | limit/usage registers and grant logic of one structure |
| `rtl/sdt_repartition_ctrl.sv` | STRP handshake, flush pulse, configuration writes |
| `rtl/sdt_core_partition.sv` | one core: eight limiters and the controller |
| `rtl/sdt_cmp.sv` | top: `NCORES` cores |
| `tb/sdt_ref_pkg.sv` | reference model of one core, used by the core and chip testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Verification

Every testbench compares the design's outputs each cycle with a model written
separately in the testbench. Each one prints `TB_RESULT checks=N failures=M` and
has a cycle watchdog.

* `tb_sdt_partition_unit` tests a 20-entry limiter that a flush empties and a
  37-entry one that keeps its entries. It uses random alloc/free counts,
  configuration writes and flushes. It also checks by hand that a new
  configuration applies one edge after `cfg_we`.
* `tb_sdt_repartition_ctrl` checks the flush timing by hand (flush in the cycle
  after acceptance, for exactly one cycle) and then runs random STRPs that are
  held until accepted.
* `tb_sdt_core_partition` runs one core at full size for 20,000 cycles with random
  traffic and STRPs. It checks exact limits by hand, for example BTB 819/7373
  under High.
* `tb_sdt_cmp` runs the whole 20-core top with default parameters for 6,000
  cycles, with every core under its own random traffic and STRPs. At the end it
  fails unless each mechanism occurred at least once:
  - a grant
  - a partial grant
  - a block at the limit
  - a block because the whole structure was full
  - a thread above a freshly shrunk limit
  - a stall
  - a flush that emptied a queue
  - entries kept across a flush
  - an STRP held while the previous one was applied
  - each of the four configurations
  - cores running different partitions at the same time

* `tb_sdt_workloads` runs one full-size core with a greedy application thread
  and a delivery thread. The delivery thread tries to hold the l2fwd working set
  listed above, and the bench repeats this under each of the four
  configurations. It checks that the delivery thread always gets every entry
  that fits under its own limit, however hard the application pushes. It
  reaches its working set in exactly the structures where its limit allows
  (all of them under Baseline and Low, three under Medium, only the BTB under
  High). The application fills, but never exceeds, its own share.

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/sdt_pkg.sv tb/sdt_ref_pkg.sv rtl/sdt_partition_unit.sv rtl/sdt_repartition_ctrl.sv \
  rtl/sdt_core_partition.sv rtl/sdt_cmp.sv tb/tb_sdt_cmp.sv --top-module tb_sdt_cmp
./obj_dir/Vtb_sdt_cmp +verilator+rand+reset+2
```

The full-size chip test builds in about 15 s and runs in under a second.

## What follows the source description and what does not

Taken from the description of SDT:

* the per-thread limit/usage register pair per structure, and blocking at the limit
* programmable limits
* the four configurations and their shares
* the list of partitioned structures and their sizes
* STRP as the way software sets a partition
* flushing, not draining, on a re-partition
* 20 cores

Choices made in this RTL where the description is silent:

* **Encodings.** The 2-bit configuration code and the STRP operand layout are
  this design's. The ISA encoding of STRP itself is not defined here; the core
  decodes STRP and passes on its operand.
* **Rounding.** The SDT share is rounded down.
* **Grants.** A thread may request several entries per cycle, up to 12, and is
  granted as many as fit.
* **Whole-structure check.** This check was added to handle shrinking limits (see
  above).
* **What a flush clears.** A flush empties the IQ, LQ, SQ and ROB and keeps the
  BTB and the register files. Entries a thread holds beyond a new, smaller limit
  are not taken away; the thread is blocked until it drops below its limit.
* **Timing.** The flush lasts one cycle, the limit write happens in the same
  cycle, and STRP uses a valid/ready handshake.
* **Register count.** The description names both one register pair per thread and
  structure and one pair per structure. This design has one pair per thread and
  structure.
* **Fixed shares.** The shares are the fixed 10/20/40/50 % of the configurations.
  The measured requirement of the delivery thread per structure (3.6 %–35.3 % of
  the core, depending on structure and load) is not encoded. The daemon chooses
  among the four configurations.

## Changing the design

* **Core count:** `sdt_cmp #(.NCORES(n))`.
* **Structure sizes:** the `SIZE_*` parameters of `sdt_core_partition`. Counters
  are `CNT_W` = 14 bits in `sdt_pkg`, so sizes are limited to 16383. Widen
  `CNT_W` for larger structures.
* **Shares:** `sdt_percent` in `sdt_pkg`. The per-structure tables are computed
  from it when the design is elaborated, so no division is built into hardware.
  The testbench models keep their own copy of the shares (`share()` in
  `tb/sdt_ref_pkg.sv` and `tb/tb_sdt_partition_unit.sv`). Change those together
  with the package.
* **What a flush clears:** `clears_on_flush` in `sdt_pkg`, and `clears` in the
  reference model.
* **Superscalar width:** `SUPERSCALAR` and `REQ_W` in `sdt_pkg`.
