# Tiered-Latency DRAM channel in SystemVerilog

## The idea

A DRAM bitline with many cells on it is slow, because the cell and the sense
amplifier must move a large bitline capacitance. Short bitlines are fast, but
they need many more sense amplifiers, which makes the chip much bigger.
Tiered-Latency DRAM keeps the long 512-cell bitline. An isolation transistor
splits it into two segments:

* The **near segment** is 32 cells next to the sense amplifiers. When one of
  its rows is accessed, the transistor is off and the sense amplifier sees only
  the short segment. Its row cycle is about as fast as a short-bitline DRAM
  (tRC 23.1 ns).
* The **far segment** holds the other 480 cells. When one of its rows is
  accessed, the transistor is on and acts as a resistor. Its row cycle is
  slower than a plain long bitline (tRC 65.8 ns against 52.5 ns).

The memory controller treats each subarray's near segment as a small cache of
that subarray's far rows. The copy needs no data bus. The controller activates
the far row, so the row sits in the sense amplifiers and drives the whole
bitline. It then activates a near row, and the row is written into it. This
**inter-segment transfer** costs only about 4 ns on top of tRC. It stays inside
the bank, so the channel keeps serving other banks meanwhile.

This code implements that design:

* A behavioural model of the segmented DRAM array that checks timing.
* A synthesizable memory controller that manages the near-segment cache.
* A top level that joins the two, with event counters.

## Blocks

| File | Kind | What it does |
|---|---|---|
| `rtl/tl_pkg.sv` | package | Geometry, the segment timing in clock cycles, and the command and segment types |
| `rtl/tl_subarray.sv` | behavioural model | One 512-row subarray: near rows 0..31, far rows 32..511, the isolation-transistor state, sense amplifiers, per-segment timing checks, and the transfer triggered by a second ACT |
| `rtl/tl_bank.sv` | behavioural model | A bank of subarrays on one command and data path |
| `rtl/near_seg_tags.sv` | RTL | Tag store of the near-segment cache. Each subarray has 32 fully associative entries holding valid, dirty, the far-row tag and a benefit counter. It does the lookup and picks the victim |
| `rtl/tl_bank_ctrl.sv` | RTL | Per-bank controller: hit, miss, fill, write-back, and segment-aware timing |
| `rtl/cmd_arbiter.sv` | RTL | Round-robin choice of one bank's command per cycle |
| `rtl/tl_mem_ctrl.sv` | RTL | One bank controller per bank, the shared command bus, and the read-data return |
| `rtl/tldram_top.sv` | top | Controller plus eight bank models, with hit, miss, fill, write-back and timing-error counters |

### Timing

The source gives only the row cycle time of each segment. I split it into
tRCD, tRAS and tRP myself, at a 1.25 ns clock (DDR3-1600):

| | tRCD | tRAS | tRP | tRC (cycles) | tRC (ns, source) |
|---|---|---|---|---|---|
| near segment | 6 | 12 | 7 | 19 | 23.1 |
| far segment | 9 | 36 | 17 | 53 | 65.8 |
| transfer adds | | | | 4 | 4 |

In the far split, tRCD is a small part of tRC and tRAS a large part. This
matches the source's account of a far access: it senses quickly, because the
near part of the bitline is next to the sense amplifier, but restoring the
cell through the transistor is slow.

### Controller behaviour

A request names a bank, a subarray, a logical row (0..479, one of the far
rows), a column and read/write. The bank controller looks the row up in the
tag store. That takes one cycle.

* **Hit.** The controller sends ACT to the near row holding the copy, then RD
  or WR after the near tRCD, then PRE after the near tRAS. A write marks the
  entry dirty. The bank is busy for 19 cycles.
* **Miss.** The controller sends ACT to the far row, then RD or WR after the
  far tRCD. After the far tRAS it sends ACT to the victim near row, which is
  the transfer. PRE follows 4 cycles later. The tags are updated, and the bank
  is busy for 57 cycles.
* **Dirty victim.** Before the miss, the victim is copied back to its far home
  row. This takes ACT near, ACT far, then PRE, another 57 cycles.

The cache inserts every missed row. Each entry's benefit is a 4-bit count of
its hits. If one counter would overflow, all counters of that subarray are
halved. The victim is the first invalid entry, otherwise the entry with the
least benefit.

Each bank controller raises a command request only when the bank's timing
allows it. The arbiter grants one bank per cycle. Commands of other banks are
therefore issued between the ACTs and the PRE of one bank's transfer.

Read data returns one cycle after RD. From the clock edge that accepts a read
to an idle bank, the data comes back after:

* 12 cycles on a miss: lookup 2, far tRCD 9, read 1.
* 9 cycles on a hit: lookup 2, near tRCD 6, read 1.

## What follows the source and what is my own

Taken from the source:

* 512 cells per bitline, split 32 near / 480 far.
* The isolation transistor is off for near accesses and on for far accesses.
* Near tRC is 23.1 ns and far tRC is 65.8 ns.
* An inter-segment transfer is a second activation costing 4 ns extra.
* The transfer happens inside the bank while other banks keep using the channel.
* The near segment is a hardware-managed cache of the far segment.

My own choices:

* The clock, and the split of tRC into tRCD, tRAS and tRP.
* Banks, subarrays per bank, row width and column width.
* The closed-row policy.
* Write-back of dirty victims.
* The exact benefit rules. The source names a benefit-based caching policy,
  but its rules are defined elsewhere.
* The request and response ports, and round-robin arbitration.
* The cells start from a known pattern,
  `INIT_ID * 65536 + row * 16 + column`, so that tests can predict every read.

The source also describes near segments exposed to the operating system as a
separate fast region. That needs software page placement and is not built
here. The analog parts (transistor, sense amplifiers) appear only through
their logical effect in the subarray model.

## Parameters

Parameters shared by the controller, bank and top:

* `NB` (8): banks.
* `SUBS` (4): subarrays per bank.
* `ROWS` (512): cells per bitline.
* `NROWS` (32): near-segment rows.
* `COLS` (8): column words per row.
* `WBITS` (64): bits per word.
* `IDW` (8): read tag width.

`NROWS` can be set anywhere from 1 to 511. The timing constants stay those of
the 32-row design, because the source gives numbers only for that length.

## Simulating

Each testbench checks itself and prints `TB_RESULT checks=N failures=M`. For
example, with Verilator 5:

```
verilator --binary --timing --assert -y rtl rtl/tl_pkg.sv tb/tb_tldram_top.sv \
    --top-module tb_tldram_top
./obj_dir/Vtb_tldram_top
```

`tb_tldram_top` runs the top at its default size. It checks:

* The read latencies of a miss and of a hit.
* Random traffic over every bank, subarray and far row.
* Heavy reuse that overflows the near cache.
* That each mechanism happens at least once: near hit, miss, fill,
  write-back, a command issued during another bank's transfer, bus contention,
  a held-off request, and the transistor both on and off.

The other testbenches:

* `tb_tl_subarray` and `tb_tl_bank` check segment timing, transfers and
  addressing.
* `tb_near_seg_tags` compares against a reference model.
* `tb_tl_bank_ctrl` checks the 19- and 57-cycle row spacing.
* `tb_cmd_arbiter` checks round-robin fairness.
* `tb_tl_mem_ctrl` checks multi-bank concurrency.
* `tb_near_size_sweep` runs one request stream on four channels with near
  segments of 1, 8, 32 and 128 rows. It checks that hits never fall as the
  segment grows. At 128 rows, where the whole working set fits, it checks
  that only compulsory misses remain. One run gave 80, 855, 1217 and 1404
  hits out of 1500 requests.
