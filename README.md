# Deterministic memory: a DM-aware memory hierarchy for a four-core system

Real-time tasks on a multicore suffer from interference in the shared
memory hierarchy: another core can evict their lines from the shared cache,
occupy their DRAM banks or delay their requests in the memory controller.
The usual remedy, partitioning everything per core, wastes capacity and
bandwidth, because most of a real-time task's memory is not on its critical
path.

This RTL implements the hardware half of a *deterministic memory* design.
The operating system marks each page as either **deterministic** (DM) or
**best-effort** (BE). The mark is stored in the page-table entry. From then
on, every memory request carries one extra bit, `dm`, and every shared block
on the way to DRAM uses it:

| block | DM request | BE request |
|---|---|---|
| TLB (`dm_tlb`) | reads the page's memory type and sets `dm` | `dm = 0` |
| bus (`dm_bus_arb`) | carries `dm` unchanged | carries `dm` unchanged |
| shared LLC (`dm_llc`, `dm_victim_sel`) | fills only into the core's own way partition; its lines cannot be evicted by other cores | fills into any way that does not hold a DM line, in any partition |
| DRAM controller (`dm_mc`, `dm_mc_sched`) | served first, round-robin over banks | FR-FCFS; gets a turn after at most 30 DM requests in a row |

DRAM bank isolation comes from page placement. The OS puts each core's DM
pages in banks private to that core and BE pages in shared banks. The
hardware needs only an address map in which a page lies in a single bank
(`dm_pkg`: bank = PA[14:12]).

## Top level and data path

`dm_soc` is the top. It instantiates four `dm_tlb`, one `dm_bus_arb`, one
`dm_llc` and one `dm_mc`, all on a single clock:

```
core c (L1 miss / write-back) --> dm_tlb[c] --+
                                              +--> dm_bus_arb --> dm_llc --> dm_mc --> DRAM command bus
                  page-table walk port <------+                      |
core_resp / core_resp_valid[c] <------------------------------------+
```

The cores, their L1 caches, the page-table walker's memory and the DRAM
device are outside the design. Each appears as a set of ports:

- `core_req_*` / `core_resp*`: one port per core, carrying 64-byte line requests;
- `ptw_*`: one port per core, which returns the second-level page descriptor;
- `dram_cmd`, `dram_wdata`, `dram_rvalid`, `dram_rdata`: the DRAM device.

Configuration inputs:

- `dm_memtype`: the memory-type number reserved for DM;
- `cfg_*`: the way partitions;
- `cln_*`: DM cleanup;
- `tlb_flush`: flushes the TLBs.

`ev` is a struct of one-clock strobes, one for each mechanism in the LLC and
the controller. It is meant for statistics.

Default sizes follow the evaluated system: 4 cores, a 2 MiB 16-way LLC with
56 MSHRs and a 12-clock hit latency, a DRAM controller with 64 read and 64
write buffer entries, 8 DRAM banks, and a limit of 30 consecutive DM
requests.

## Marking a page deterministic (dm_tlb)

The ARMv7 small-page descriptor has these fields:

| field | bits |
|---|---|
| physical page number | [31:12] |
| TEX[2:0] | [8:6] |
| C | 3 |
| B | 2 |
| "small page" flag | bit 1 |

With TEX remapping enabled, `{TEX[0], C, B}` selects one of eight memory
types. Linux uses only six of them, so one free type can be reserved as
"deterministic". The TLB compares a page's type with `dm_memtype`. It stores
the result as one bit in the TLB entry and puts that bit on every request
translated through the entry. Changing `dm_memtype` requires a TLB flush.

Choices made in this design:

- 64 entries, fully associative, with round-robin refill;
- one walk outstanding at a time;
- a hit adds one clock;
- a descriptor without the small-page bit is reported on `core_fault` and is not cached.

## The DM-aware shared cache (dm_llc, dm_victim_sel)

This is the least conventional part of the design.

**State per set.** Each line has a DM bit, and together they form the set's
*DetMask*. Each core `i` has a programmable way mask, *PartMask_i*. At reset,
core `c` owns ways `4c..4c+3`.

**Victim choice on a fill** (`dm_victim_sel`, combinational):

- A **DM fill from core i** uses the LRU line among `PartMask_i & ~DetMask`,
  that is, a best-effort line inside the core's own partition. It then sets
  that way's DM bit. Only when the whole partition is already
  deterministic does it replace the LRU line of the partition.
- A **BE fill** uses the LRU line among `~DetMask`. That is any way not
  holding a DM line, in *any* partition, and the fill clears the way's DM bit.
  The unused part of a core's partition is therefore shared by all cores.
  In plain way partitioning it would be wasted.
- If a BE fill finds every way deterministic, nothing may be evicted. The
  line is then not allocated: read data is passed through and write data
  goes straight to memory. This case is this design's own rule, because the
  algorithm leaves it undefined.

Why this gives isolation: a DM line is only ever replaced by a DM fill from
its own core. Other cores' fills never touch it.

**Cleanup.** Over time a partition fills with DM lines of tasks that are no
longer running, which defeats the sharing. At a context switch the OS pulses
`cln_req` with `cln_core`. The cache then sweeps all sets, one per clock,
and clears the DM bit of every line in that core's partition. The lines stay
valid. `cln_done` pulses at the end, and `cln_count` reports how many lines
were cleared; the OS can use that number for its cache-related preemption
delay estimate. A later DM hit on such a line in the core's own partition
marks it deterministic again, without refetching.

**Pipeline.**

- A request is looked up in the clock it is accepted.
- A hit answers exactly `HIT_LAT` (12) clocks later.
- A read miss takes one of 56 MSHRs and sends a line read to the controller.
  The MSHR index is the request's id. The victim is chosen when the data
  returns. The line is installed and answered `HIT_LAT` clocks after that.
- A write is a full-line L1 write-back. On a miss it is allocated at once,
  without a fetch, and acknowledged.
- Dirty victims are written back with their own DM bit. Fills carry the DM
  bit of the requester.
- A request to a line that already has an MSHR holds the port
  (`ev.llc_mshr_stall`).
- After reset the tag state is cleared by a sweep of `SETS` clocks, with
  `req_ready` low during the sweep.

The cache is write-back and write-allocate, with 64-byte lines and true LRU
(per-way ages). The arrays are plain SystemVerilog memories.

## The DM-aware DRAM controller (dm_mc, dm_mc_sched)

**Buffers.** Requests from the LLC are held in a buffer of 64 read and 64
write entries. Each entry records:

- DM bit;
- bank and row;
- arrival stamp;
- id;
- data.

**Two-level scheduling** (`dm_mc_sched`, combinational pick):

1. If any DM request is queued, pick one. Banks are visited round-robin,
   starting after the bank served last, and the oldest request of the bank is
   taken. Because DM pages sit in per-core private banks, this is
   round-robin among the cores' deterministic streams.
2. Otherwise, or when 30 DM requests have been issued in a row while a BE
   request waits, pick a BE request by FR-FCFS: the oldest request that hits
   an open row, else the oldest request.

The counter of consecutive DM requests resets whenever a BE request is
issued. This bounds the BE worst case without weakening the DM one much.

**Command generation.**

- The picked request becomes `PRE` (if another row is open), `ACT` (if no
  row is open), then `RD` or `WR`, with the timings `T_RCD`, `T_RP`, `T_RL`,
  `T_WL` and `T_BURST`.
- The page policy is *open-adaptive*. A column command auto-precharges when
  other queued requests target the same bank and none of them the open row.
  Otherwise the row stays open.
- A read that finds a queued write to its line is answered from that write.
- A second write to a queued line replaces the first write's data.
- A write to a line with a queued read waits until the read has been issued.
- While the response queue is full, only writes are eligible for
  scheduling. Without this rule the system can deadlock: the LLC cannot take
  read data until it has queued a dirty victim's write-back, and the full
  write buffer cannot drain while the controller waits for the LLC.

**Known simplifications.** The controller serves one request at a time, so
there is no overlap of activates across banks. There is also:

- no refresh;
- no read/write turnaround timing or tRAS/tWR/tFAW;
- no separate DRAM clock.

The timing defaults (10/10/8/4/8 clocks) are plausible LPDDR2 values in
DRAM clocks, not figures from the source design. Performance numbers from
this model are therefore only relative. The scheduling order, which is what
the DM mechanism is about, is exact.

## Departures from the source design and open points

- The replacement algorithm is implemented as written in its pseudocode: a
  BE fill clears the victim's DM bit. A flowchart version of the same
  algorithm shows an additional "ignore" mask and a different mask update
  (`DetMask ^= !(1<<victim)`). The pseudocode was followed.
- Line size (64 B), the address map, TLB size and organisation, bus
  arbitration (round-robin, one grant per clock), handshakes, reset values,
  the cleanup sweep rate and all DRAM timings are this design's choices.
- A single clock drives everything. The evaluated system runs 2 GHz cores
  and a 533 MHz LPDDR2 device.
- FR-FCFS has no age limit. A best-effort read that misses the open row can
  wait a long time behind a stream of row-hit writes. This is the expected
  pessimistic best-effort behaviour, and deterministic requests are not
  affected.
- MSHRs are shared among all cores. A DM-aware MSHR or TLB reservation
  scheme is possible, but it is not part of the main design and is not
  built.
- The OS side is not hardware and is not included: page tables, the
  bank-aware page allocator and the cleanup call at context switch.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_dm_victim_sel` | every fill against a reference model of the algorithm, over random masks and ages |
| `tb_dm_tlb` | translation and the DM bit for all eight memory types; one-clock hit; no walk on a hit; faults; flush; round-robin refill; back-pressure |
| `tb_dm_bus_arb` | in-order, lossless delivery with the DM bit; round-robin fairness; response steering |
| `tb_dm_mc_sched` | every pick against a reference scheduler; exactly 30 DM picks before a waiting BE pick; bank rotation; FR-FCFS |
| `tb_dm_mc` | data integrity against a shadow memory; DRAM protocol, checked by `lpddr2_model`; closed-bank and row-hit read latencies; the 30-DM rule on a real queue (issue order `D×30 B …`); forwarding, merging, auto-precharge |
| `tb_dm_llc` | 12-clock hit latency; miss latency; DM isolation under a flood from other cores; BE sharing of all 16 ways; no-allocate; cleanup count and sweep time (one clock per set); MSHR stall; random traffic with data checking |
| `tb_dm_soc` | the whole system at its default size, with a page-table model and the DRAM model; see below |
| `tb_dm_cache_workload` | the cache-isolation experiment at 64 sets; see below |

`tb_dm_soc` has four cores with up to 12 requests in flight each. It runs
mixed traffic, a DM flood against a BE stream, a set filled with DM lines,
a cleanup, a page fault and a TLB flush. It checks:

- read data;
- the DRAM protocol;
- the cleanup count;
- a 12-clock LLC hit;
- that every mechanism strobe in `ev`, TLB walks, faults and cleanup each happen at least once.

It takes about 60,000 clocks and under a second of simulation.

`tb_dm_cache_workload` runs the cache-isolation experiment with a 128 KiB
LLC (64 sets; all other sizes are the defaults). A real-time task on core 3
re-reads a 12 KiB working set, computing between accesses. Three streaming
co-runners write over buffers that together equal the LLC size. The test
runs twice:

| run | real-time pages | real-time LLC hit rate after warm-up |
|---|---|---|
| DM | deterministic | 100% |
| NoP (no partitioning) | best-effort | 93% |

In the DM run, co-runner lines also occupy the quarter of core 3's partition
that the task leaves unused: 64 of 256 lines. This is the space a plain way
partition would waste. The DRAM-controller experiment is not reproduced as a
testbench beyond `tb_dm_mc` and the DM-flood phase of `tb_dm_soc`.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb rtl/dm_pkg.sv tb/tb_dm_soc.sv --top-module tb_dm_soc -o sim
./obj_dir/sim
```

Substitute any other testbench name. `tb_dm_mc` and `tb_dm_soc` also use
`tb/lpddr2_model.sv`, a behavioural DRAM device that stores data in an
associative array and flags timing and state violations.
