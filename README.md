# IMDB: an in-module write-disturbance barrier for PCM

## The idea

In phase-change memory, a RESET pulse heats the cells next to the cell being
programmed. An idle amorphous cell that sits on the same bitline, one wordline away,
drifts toward the crystalline state a little with every such pulse. After about a
thousand pulses (the *WDE limitation number*) it flips. That is a write-disturbance
error (WDE).

The barrier sits inside the memory module, between the media controller and the PCM
devices, and counts these pulses:

* For a small set of recently written addresses, it keeps a running count of the
  1-to-0 bit flips written to each 64-bit word. A 1-to-0 flip is a RESET, and a
  RESET is what disturbs the neighbours.
* When a count passes half the limitation number minus one (511), it issues
  **rewrites** of the two neighbouring wordlines. The rewrites restore those cells
  before they can flip. Half, because two rows can disturb a row.
* The offending line (the *aggressor*) is then **promoted** into a tiny data cache,
  the **barrier buffer**. Its later writes stop programming the PCM at all.

Only addresses and counters are kept for the large table. Data is held for just
8 lines per bank, so little has to be flushed on power loss.

This repository is a synthesizable SystemVerilog implementation of that barrier.
It is sized as the paper's chosen configuration, IMDB(e256b8g8): 256 main-table
entries, 8 barrier-buffer entries and an AppLE group size of 8, for each of 4 banks.

## Block structure

```
                 media controller (cmd: read / write+old data / writeback, bank-tagged)
                                   |
  imdb_top  -----------------------+---------------------------------------------
   | steer by cmd.bank             v
   |  imdb_plane (x4, one per bank)
   |   +------------------+   +-------------------+   +--------------------+
   |   | imdb_main_table  |<->| imdb_apple        |   | imdb_barrier_buffer|
   |   | 256 x (CAM tag + |   | group counter +   |   | 8 x (tag, RwCntr,  |
   |   |  RwCntr, 8 ZFC,  |   | random offset,    |   |  64B data, Freq)   |
   |   |  MaxZFCIdx)      |   | "<" and data reg  |   | LFU victim         |
   |   +------------------+   +-------------------+   +--------------------+
   |   8 x imdb_integrated_counter   imdb_rewrite_gen   imdb_lfsr (x2)
   |   IDLE / HIT / MISS control
   +--> per bank: media channel (read/write/write-back), rewrite channel, read response
```

| File | What it is |
|---|---|
| `rtl/imdb_pkg.sv` | Widths, the paper's constants and shared types (address, entry, command structs, event strobes) |
| `rtl/imdb_integrated_counter.sv` | Counts 1-to-0 flips or zeros in one 64-bit word |
| `rtl/imdb_main_table.sv` | 256-entry, fully associative table: a CAM of Row&Col and a dual-port array of counters |
| `rtl/imdb_apple.sv` | AppLE, the sequential sampling victim finder |
| `rtl/imdb_barrier_buffer.sv` | 8-entry data buffer with an LFU victim |
| `rtl/imdb_rewrite_gen.sv` | Issues rewrites of row-1 and row+1 |
| `rtl/imdb_lfsr.sv` | 16-bit LFSR, the random source |
| `rtl/imdb_plane.sv` | One bank's barrier: the three-state control joining the blocks above |
| `rtl/imdb_top.sv` | Four planes behind one bank-tagged command port |
| `rtl/imdb_mc_wq.sv` | The media controller's per-bank write queue with pre-write read and rewrite merging. It sits outside the module, in front of `imdb_top`. |

## How a command is handled (one plane)

A plane takes one command at a time. It accepts only in IDLE, with its media output
slot empty, no rewrite pending and no flush in progress.

* **Read.** If the line is in the barrier buffer, the data is returned on `rsp` the
  next cycle and the entry's FreqCntr is incremented. Otherwise the read goes to the
  media unchanged.
* **Write that hits the barrier buffer.** The buffered data is replaced and
  FreqCntr is incremented. Nothing reaches the PCM.
* **Write that hits the main table (HIT).** This takes one cycle after acceptance.
  1. The eight integrated counters compare the old data with the new data, word by
     word. The media controller reads the old data ahead of the write.
  2. Each flip count is added to its word's ZeroFlipCntr, and MaxZFCIdx is
     recomputed.
  3. If the largest sum is 511 or less, the counters are written back and the write
     goes to the media.
  4. If it is above 511:
     * two rewrites (row-1 and row+1, same column) go to the rewrite channel;
     * the entry's RewriteCntr is incremented;
     * the line moves into the barrier buffer. The write's data becomes the
       buffered, dirty copy.
  5. If the buffer was full, its least-frequently-used entry is swapped out at the
     same moment:
     * its data goes to the media as a write-back;
     * its address and RewriteCntr take the main-table slot just vacated, with
       ZeroFlipCntr at 0.
* **Write that misses both (MISS).** The write goes to the media. With probability
  1/128 (the low 7 LFSR bits are zero) the address is also inserted:
  * it goes into the slot AppLE chose;
  * each ZeroFlipCntr starts at the number of zeros in its new word. The paper
    calls this "prior knowledge": it keeps a freshly inserted aggressor from being
    evicted at once.
  * RewriteCntr starts at 0.

  If AppLE has not finished its search yet, the plane waits in MISS until it has.
* **Writeback command** from the controller: passed to the media unchanged.

**AppLE.** Finding the exact minimum of 256 entries would need 256 read ports.
AppLE instead splits the table into 32 groups of 8:

* It reads one randomly chosen entry per group, one per cycle, on the second port of
  the counter array.
* It keeps the smallest key in a register. The key is, in order:
  1. empty entries first;
  2. then the lowest ZeroFlipCntr (the sub-counter MaxZFCIdx points to);
  3. then the lowest RewriteCntr.

A search takes 33 cycles. It starts after reset and again after every write that
the tables handled. The paper's point is that a PCM write keeps the bank busy for
about 120 controller cycles, so the search is hidden in that time. The stall
described above only appears when writes arrive faster than that.

**Flush.** `flush_req` stops new commands. Each plane then walks its 8 buffer slots
and writes back every valid line, one per free media cycle. `flush_done` goes high
when all four buffers are empty and their media slots have drained. The main table
holds only addresses and counters, so it is not flushed.

## The media controller's side (imdb_mc_wq)

The barrier needs two changes in the media controller, and `imdb_mc_wq` builds
both. It is one bank's write queue, 64 entries by default, and one instance per
bank would feed `imdb_top`.

**Pre-write read.** Before a queued write is issued, its line is read. The old data
then travels with the write, so the integrated counters can count flips. These
reads rank between the two other kinds of traffic: one is requested only while no
normal read of the bank waits (`rd_pending` low), and writes rank below them. One
pre-write read is in flight at a time.

**Merge.** A rewrite from the barrier coalesces with a queued write to the same
line, including one arriving in the same cycle. The write then also carries the
rewrite, shown by `cmd_rewrite`. A rewrite with no partner becomes an entry of its
own, and it writes back the line's current contents from its pre-write read.

**Queue rules:**

* A host write to a line already queued replaces that entry's data, so each line has
  at most one entry. This guarantees that a pre-write read never misses an older
  write still in the queue.
* Entries leave in arrival order, once their old data is in.
* Writes leave only while no normal read waits, or when the queue is full.
* Service is FCFS, not the FR-FCFS the paper's controller uses, because row-buffer
  state is not modelled. The read queue and the cross-bank scheduler are not built.

## Interfaces (imdb_top)

| Port | Dir | Type | Meaning |
|---|---|---|---|
| `cmd_valid`, `cmd_ready`, `cmd` | in, out, in | `cmd_t` | `op` (read/write/writeback), `bank`, `addr` (row 16 + col 9), `wdata`, `odata` (old data for writes) |
| `media_valid[b]`, `media_ready[b]`, `media[b]` | out, in, out | `media_cmd_t` | Per-bank command to the PCM: read, write or write-back |
| `rw_valid[b]`, `rw_ready[b]`, `rw_addr[b]` | out, in, out | `addr_t` | Per-bank rewrite command to the controller's write queue |
| `rsp_valid[b]`, `rsp[b]` | out | `rd_rsp_t` | Read served by the barrier buffer (one-cycle pulse) |
| `flush_req`, `flush_done` | in, out | bit | Power-loss flush of all barrier buffers |
| `ev[b]` | out | `plane_ev_t` | One-cycle event strobes (hit, miss, insert, filtered, stall, rewrite, promote, demote, buffer hits, flush write-back) for statistics |

* All channels are valid-ready.
* A valid output holds its value until it is accepted.
* Reset (`rst_n`) is asynchronous and active low. It clears all valid bits and
  counters. The table contents themselves are not reset.
* Latency:
  * a write handled by the tables leaves on `media` 2 cycles after acceptance;
  * a buffered read answers 1 cycle after acceptance;
  * a forwarded read appears on `media` 1 cycle after acceptance.

## Parameters

| Parameter | Default | Where it comes from |
|---|---|---|
| `BANKS` | 4 | Paper: 8GB module, 2 ranks x 2 banks |
| `MT_ENTRIES` | 256 | Paper: e256 |
| `BB_ENTRIES` | 8 | Paper: b8 |
| `GROUP_SIZE` | 8 | Paper: g8 (use 4 for e256b8g4) |
| `INS_PROB_LOG2` | 7 | Paper: p = 1/128 |
| `THRESH` | 511 | Paper: WDE limit 1K / 2 - 1 |
| `ROW_W`, `COL_W` (package) | 16, 9 | Paper: Row&Col is 16+9 bits; 2^25 lines of 64 bytes is exactly one 2GB (16Gb) bank |
| `ZFC_W`, `RWC_W`, `FRQ_W` | 9, 8, 8 | Paper |

Storage at the defaults, per plane:

* Main table: 256 x 108 bits (25 tag + 8 + 72 + 3), about 3.4KB as in the paper.
* Barrier buffer: 8 x 553 bits.

Synthesis of the full four-plane top gives about 8.1k cells, 8.2k flip-flop bits and
128k memory bits.

## What follows the paper, and what this design chose

**Follows the paper:**

* table fields and widths;
* fully associative main table;
* one plane per bank;
* the integrated counter's gates (an OR with the old word inverted, a mux on "newly
  inserted", a zero counter);
* threshold 511 and p = 1/128;
* promotion into the buffer when RewriteCntr updates;
* LFU replacement with write-back and demotion (the swap), and RewriteCntr kept on
  demotion;
* AppLE's practical sequential form;
* the IDLE/HIT/MISS machine;
* buffer-only flush.

**This design's choices, where the paper is silent:**

* The integrated counter's output is 7 bits. The figure prints 6, but 64 flips need
  7.
* AppLE:
  * the sampled address is group x 8 + a random offset;
  * a fresh random draw is made per group;
  * empty entries come first, and a tie keeps the earlier sample;
  * the compared ZeroFlipCntr is the largest sub-counter.
* The random source is a 16-bit LFSR. Each plane and each AppLE has its own seed.
* FreqCntr counts hits, saturates at 255 and starts at 0 on insertion.
* The LFU tie-break picks the lowest slot.
* A write that causes a promotion is absorbed into the buffer. It is not also
  written to the media.
* A demoted entry restarts with ZeroFlipCntr 0.
* An aggressor on the first or last row gets one rewrite only.
* The barrier buffer is built from registers rather than a CAM plus SRAM macro.
* A write takes 2 cycles. The paper gives 1-3 for its own pipeline.
* A miss waits for an unfinished AppLE search instead of using a stale candidate.
* Read misses are forwarded, and writeback commands pass through.
* The top has a single bank-tagged command port.

## Not implemented

These parts are outside the barrier, or the paper does not design them:

* **The rest of the media controller.** This covers the read queue, FR-FCFS
  scheduling, device timing, and the arbiter that would join the four `imdb_mc_wq`
  queues and the reads onto `imdb_top`'s command port. The write queue's two IMDB
  changes are built (see above). They are tested on their own, and together with
  `imdb_top` in `tb_imdb_system`, where a simple round-robin arbiter written in the
  testbench joins them. No synthesizable arbiter is provided.
* **The PCM devices**, the host processor and its caches, the ECC alternatives the
  paper evaluates, and the supercapacitor that powers a flush.
* **The 64Gb-bank scalability case.** A 64Gb bank holds 2^27 lines and needs a
  27-bit Row&Col. To run it, widen `ROW_W` in `imdb_pkg` by 2 and, for the paper's
  fix, set `MT_ENTRIES` to 512.
* **The workload traces.** The SPEC CPU2006 and pmix traces are not available here.
  Any address of the paper's 8GB module fits the design, because each bank is 2^25
  lines and the tag is 25 bits.

## Running the tests

Each testbench is a top module with no ports. Build and run one with Verilator 5 from
the repository root. The package goes first, and `-y rtl` finds the modules:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl rtl/imdb_pkg.sv \
          tb/tb_imdb_top.sv --top-module tb_imdb_top --Mdir build
./build/Vtb_imdb_top
```

Add `+verilator+seed+N` to the run to change the random stimulus. Every testbench
ends by printing `TB_RESULT checks=N failures=M`, and a watchdog ends it if it
hangs. To try other sizes, change the parameters of `imdb_top`, such as
`GROUP_SIZE` or `MT_ENTRIES`. Address widths are constants in `imdb_pkg`.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `tb_imdb_integrated_counter` | Corner-case and random word pairs, against an independent count of 1-to-0 flips or zeros |
| `tb_imdb_main_table` | Random inserts, invalidations and lookups, against a model table; one-cycle reads on both ports |
| `tb_imdb_apple` | One sample per group in order, the search time (33 edges), restarts, and the candidate against the smallest key among the recorded samples |
| `tb_imdb_barrier_buffer` | Lookup, hit update, FreqCntr saturation, LFU victim and flush read, against a model |
| `tb_imdb_rewrite_gen` | Neighbour addresses, first/last-row boundaries, and holding under back-pressure |
| `tb_imdb_lfsr` | Step-by-step model, hold when disabled, and the 65535 period |
| `tb_imdb_plane` | A cycle-exact reference model of a plane, with 2 buffer entries and p = 1 so that every path runs often. It compares every media command, rewrite, response and event. |
| `tb_imdb_top` | All four planes at the default sizes, with no overrides. It is described below. |
| `tb_imdb_group_size` | Three complete barriers with AppLE group sizes 8, 4 and 1 (no AppLE), one write every 120 cycles. With 8 and 4 no insertion ever waits for the search. With 1 (257 cycles) insertions do wait. Every configuration's media is correct after a flush. |
| `tb_imdb_mc_wq` | The write queue against an in-order model: old data is always the line's current contents, merges, lone rewrites, read priority, drain when full, and the queue emptying at the end |
| `tb_imdb_system` | Four write queues feeding the barrier, with the test acting as the arbiter between banks and as the PCM. Hot lines, their neighbour rows and cold lines are written 40000 times. Every write reaches the barrier with the line's true old data, whether the buffer or the PCM answered its pre-write read. Rewrites come back and merge with queued writes, or write the line back unchanged. After draining and a flush the PCM holds the host's last data. |

`tb_imdb_top` drives 24,000 random reads and writes to 12 hot lines per bank, and
applies random back-pressure on all outputs. Each line's data alternates between
mostly-0 and mostly-1, so the counters climb. It checks that:

* every read returns the last data written, whether from the buffer or the media;
* every rewrite is a neighbour of a promoted line;
* the insertion rate lies between 1/256 and 1/64;
* at the edge `flush_done` rises, the media holds the last data of every line, and
  no write-back follows.

It also requires each mechanism to have happened. Typical counts are about 300
promotions, 250 demotions and 450 stalls.

The tests run under Verilator 5 with `--timing --assert`. The RTL also elaborates and
synthesizes in Yosys through the slang front end. The assertions in the RTL cover:

* valid-ready holding on the media and rewrite channels;
* no duplicate tags in either table;
* at most one buffer operation per cycle;
* AppLE never reporting a candidate while it is still searching;
* a promotion always finding the rewrite generator free;
* occupancy bounds.

Verilator lint reports no circuit warnings. Three kinds of lint-only warning remain:

* the asynchronous reset also feeds the assertions' `disable iff`;
* some package constants go unused by a given module;
* two fields go unused in the plane: the bank bits of the held command, and the
  MaxZFCIdx of the entry read back, which the plane recomputes.
