# RRAP: a read-tuned hybrid STT-RAM / eDRAM cache hierarchy

STT-RAM is dense and leaks almost nothing, but writing it is slow and costs a lot of
energy. The write cost depends on how long the cell must keep its data. A cell built for
years of retention needs a long, strong write pulse. A cell built for milliseconds can be
written much faster, but it must be refreshed. In most programs a small part of the lines
is read over and over and almost never written. RRAP ("Read Reference Activity
Persistent") uses this. It splits each core's private L2 into two STT-RAM partitions:

* **LRSC**, the low-retention STT-RAM cache. It takes all ordinary traffic: lines that
  are written, and lines read only a few times. Writes are fast (7 cycles), but every
  line must be refreshed within 10 ms.
* **HRSC**, the high-retention STT-RAM cache. It holds only lines that have proven to be
  read very often and never written. These are the "immense read reused access" (IRRA)
  lines. Writes are slow (31 cycles), but the lines are written once and then only read,
  and they never need a refresh.

The shared last-level cache (L3, eDRAM, 96 MB) decides which lines are IRRA. Each L3 line
carries a 6-bit read counter (RC) and a 1-bit write flag (WC). When an L2 miss reads a
line whose counter shows 64 reads and which was never written, the L3 tells the L2 to
place the line in its HRSC, not its LRSC.

This repository gives synthesizable SystemVerilog for everything below the L1 caches of
an eight-core chip: eight RRAP L2s, the path to the shared L3, and the L3 with its
counters. The cores, the L1s and main memory are not included. Each of them has a port
at the top level.

## Default configuration

| Item | Value | Parameter |
|---|---|---|
| Cores | 8 | `rrap_top.NCORES` |
| Line | 64 B | `rrap_pkg::LINE_BYTES` |
| LRSC | 512 KB, 8-way, 1024 sets, read 4 cycles, write 7 cycles, retention 10 ms | `LRSC_SETS`, `L2_WAYS`, `RETENTION_CYCLES` |
| HRSC | 512 KB, 8-way, 1024 sets, read 4 cycles, write 31 cycles, no refresh | `HRSC_SETS` |
| L3 | 96 MB eDRAM, 16-way, 98 304 sets, write-back, non-inclusive | `LLC_SETS`, `LLC_WAYS` |
| L3 hit latency | 30 cycles (own estimate) | `LLC_HIT_LAT` |
| IRRA threshold | 64 reads, 6-bit RC, 1-bit WC | `NR_TH` |
| Clock | 3 GHz, so 10 ms = 30 000 000 cycles | |
| Physical address | 33 bits (8 GB), line address 27 bits | `rrap_pkg::PADDR_W` |

The cycle counts are the published array latencies at 3 GHz, rounded up: 1.26 ns reads,
2.15 ns LRSC writes and 10.15 ns HRSC writes. The L3 latency is not published; 30 cycles
is an estimate and only a parameter.

The LRSC retention can be set to the three evaluated settings by changing two parameters:

| Setting | `RETENTION_CYCLES` | `LRSC_WR_LAT` |
|---|---|---|
| 140 ms | 420 000 000 | 12 |
| 10 ms (default) | 30 000 000 | 7 |
| 1 ms | 3 000 000 | 6 |

## Structure

```
                 L1 request ports (one per core)
                  |        |            |
            +-----------+-----------+   +-----------+
            | rrap_l2 0 | rrap_l2 1 |...| rrap_l2 7 |      private L2s
            |  lrsc_cache + lrsc_refresh
            |  hrsc_cache
            +-----------+-----------+   +-----------+
                  |        |            |
                 +--------------------------+
                 |        llc_arbiter       |  round robin, one request at a time
                 +--------------------------+
                              |
                 +--------------------------+
                 |  llc_cache (+ rrap_monitor)  shared eDRAM L3
                 +--------------------------+
                              |
                     main-memory port
```

| File | Contents |
|---|---|
| `rtl/rrap_pkg.sv` | Line and address types, request/response structs, event struct, byte-merge function |
| `rtl/rrap_monitor.sv` | RC/WC update and the IRRA decision for one L3 line (combinational) |
| `rtl/lrsc_refresh.sv` | Sequential refresh scheduler of the LRSC |
| `rtl/lrsc_cache.sv` | LRSC tag/data array: lookup, write hit, fill with dirty victim, refresh |
| `rtl/hrsc_cache.sv` | HRSC tag/data array: lookup, fill, invalidate |
| `rtl/rrap_l2.sv` | L2 controller joining LRSC, HRSC and refresh |
| `rtl/llc_arbiter.sv` | Round-robin path from the L2s to the L3 |
| `rtl/llc_cache.sv` | L3 controller, tag/data/counter arrays, memory interface |
| `rtl/rrap_top.sv` | Eight L2s, arbiter and L3 |

## Where a line goes

The central rule is where a line is placed in the L2. Each path below is one branch of
the `rrap_l2` state machine.

**L1 read.** Both tag arrays are searched at once. A hit in either one returns the line.
On a miss, the L2 sends a READ to the L3. The L3 answers with the line and a one-bit
`to_hrsc` flag. The L2 passes the data to the L1 at once, then fills it:

* with `to_hrsc` set, into the HRSC. The HRSC line it replaces (LRU) is simply dropped,
  because HRSC lines are always clean;
* otherwise, into the LRSC as a clean line. If the LRU victim there is dirty, it is sent
  to the L3 as a WBACK before the L2 takes its next request.

**L1 write** (a store, or an L1 write-back; a byte mask says which bytes):

* LRSC hit: the bytes are merged and the line is marked dirty.
* HRSC hit: the HRSC copy is invalidated, and the merged line is written into the LRSC as
  dirty. This keeps the slow HRSC write off the store path, so the HRSC only ever holds
  read-only lines.
* Miss: the L2 sends an RFO (read for ownership) to the L3. It merges the bytes into the
  returned line and fills it into the LRSC as dirty. An RFO never gets `to_hrsc`.

**In the L3** (`llc_cache` with `rrap_monitor`):

| Event | RC | WC | Answer |
|---|---|---|---|
| READ miss, line brought from memory | 1 | 0 | `to_hrsc = 0` |
| RFO miss | 0 | 1 | |
| WBACK miss (installed without a memory read) | 0 | 1 | |
| READ hit, WC = 0 and RC = 63 (64th read or later) | stays 63 | 0 | `to_hrsc = 1`, counts as IRRA |
| READ hit, any other case | +1, stops at 63 | unchanged | `to_hrsc = 0` |
| RFO or WBACK hit | unchanged | 1 | WBACK data is stored and the line marked dirty |

There is a small contradiction in the threshold. A 6-bit counter cannot hold 64, yet the
threshold is 64 reads. This design counts the read that brings the line in as the first,
and flags the read that finds the counter at 63. Together those are the 64th read. The
counter is never reset, so later reads of the line by other cores are also sent to their
HRSCs. Once the WC bit is set, a line is never promoted for as long as it stays in the L3.
This holds even when the write came after the line had already reached the threshold. The
original description can also be read as counting only writes that come before the
threshold; this design takes the stricter reading.

The L3 is non-inclusive. When it evicts a line it does not invalidate copies in the L2s.
A dirty L3 victim is written to memory before the new line is read.

## Refresh of the LRSC

`lrsc_refresh` spreads the refreshes of all 8192 LRSC lines evenly over one retention
period. It raises one request every `RETENTION_CYCLES / LINES` cycles (3662 by default),
going through the lines in order, valid or not. A refresh reads the line and writes it
back, so it holds the LRSC bank for `RD_LAT + WR_LAT` = 11 cycles. It takes priority: a
request that arrives during a pending refresh waits, and the bank reports this as a
`refresh_stall`. The L2 controller only issues to the LRSC when the bank is ready, and it
checks with an assertion that no refresh slot is ever missed (`overrun`). At the default
size, refresh takes 0.3% of the LRSC bank's time.

The HRSC needs no refresh, and neither does the RTL of the L3. The eDRAM refresh of the
L3 is not modelled. Decay of data in the cells is not modelled either: the arrays are
plain RTL memories, and the refresh sequencer is the part that can be built and checked.

## Timing

All blocks use one clock, with an active-low asynchronous reset. Every handshake is
valid/ready: a transfer happens on a clock edge where both are high.

* **LRSC/HRSC bank:** an accepted operation finishes with a one-cycle `done` after exactly
  its latency: lookup `RD_LAT`; write or fill `WR_LAT`; invalidate 1; refresh
  `RD_LAT + WR_LAT`. A bank does one operation at a time. After reset it clears one set
  per cycle and refuses requests until it is done.
* **L2 hit:** `l1_resp_valid` rises `RD_LAT + 1` = 5 cycles after the request is
  accepted, unless a refresh gets in the way.
* **L3 hit:** `resp_valid` rises exactly `HIT_LAT` cycles after acceptance. A miss adds
  the memory's own latency, plus a victim write when the victim is dirty.
* **L2:** one request is outstanding at a time, and so is one at the L3.

## Choices not fixed by the published description

* LRU replacement in the LRSC and the L3 (LRU is given only for the HRSC).
* Each bank is blocking and unpipelined. The sixteen L3 banks are modelled as one port.
* Round-robin arbitration on the single L2-to-L3 path.
* What a store to an HRSC line does (invalidate, then write into the LRSC).
* The L3 hit latency, reset clearing, encodings and every interface.
* No coherence between the private L2s. A line written by one core can be stale in
  another core's L2. The L3 keeps what the last WBACK wrote.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog. Block tests compare the block
with a reference model written inside the testbench, and check latencies to the cycle.

| Testbench | What it covers |
|---|---|
| `tb_rrap_monitor` | All (operation, RC, WC) combinations |
| `tb_lrsc_refresh` | Slot spacing, order, wrap, hold while unacknowledged, overrun |
| `tb_lrsc_cache` | Random traffic against a model: hits, data, LRU victim, dirty write-back, refresh priority and latency |
| `tb_hrsc_cache` | Lookup, fill, LRU eviction, invalidate |
| `tb_llc_cache` | 6-set L3 (checks the modulo index), RC/WC rules, IRRA flag, dirty eviction to memory, latency |
| `tb_llc_arbiter` | Fairness, no lost or duplicated requests, response routing |
| `tb_rrap_l2` | One L2 against a stand-in L3: both partitions, moves, write-backs, refresh stalls, latency |
| `tb_rrap_top` | Eight cores at reduced size against a memory model. Checks every read against a golden memory image and counts each mechanism; a mechanism that never happens counts as a failure |
| `tb_rrap_top_full` | The top at full size. All eight cores read one shared line X, then eight lines that map to the same LRSC set, so X is pushed out and read again. Eight rounds make 64 reads of X at the L3. The 64th read is flagged and X moves into an HRSC. Checks all data, the IRRA flag, the HRSC fill and a later HRSC hit |

`tb/main_memory_model.sv` is a behavioural main memory. Its latency and its ready are
random, and the initial contents of each line are a function of its address.

To simulate with Verilator, for example:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb \
    rtl/rrap_pkg.sv rtl/rrap_monitor.sv rtl/lrsc_refresh.sv rtl/lrsc_cache.sv \
    rtl/hrsc_cache.sv rtl/rrap_l2.sv rtl/llc_arbiter.sv rtl/llc_cache.sv rtl/rrap_top.sv \
    tb/main_memory_model.sv tb/tb_rrap_top.sv --top-module tb_rrap_top
./obj_dir/Vtb_rrap_top
```

The full-size test builds the 96 MB L3 as a real array, so it needs about 120 MB of
memory. It finishes in a few seconds once compiled.

## Known limits

* Cores, L1 caches and DRAM are outside the design.
* No cache coherence between the L2s.
* No eDRAM refresh in the L3, and no model of retention decay in the STT-RAM cells.
* One outstanding miss per L2 and at the L3. This limits the bandwidth compared with a
  real hierarchy, but does not change where lines are placed.
