# FUSE L1 data cache: SRAM and STT-MRAM in one GPU L1

A GPU streaming multiprocessor runs dozens of warps against a small L1 data cache, so the cache
thrashes and most loads go off chip. STT-MRAM packs roughly four times as many bits as SRAM into
the same area. But an STT-MRAM write takes five cycles, and a pure STT-MRAM L1 would stall the
pipeline on every fill and every store.

FUSE splits the L1 into two banks and sends each line to the bank that suits it:

* **SRAM bank (16 KB, 64 sets x 2 ways).** Takes lines that are written repeatedly ("write
  multiple", WM) and anything the cache has not classified yet.
* **STT-MRAM bank (64 KB, 512 lines).** Takes lines that are written once, by the fill, and then
  only read ("write once, read multiple", WORM). It is searched as if fully associative, using
  only four tag comparators.

A small predictor, indexed by the program counter (PC) of the load or store, learns which class
each instruction's lines belong to. A third class, "write once, read once" (WORO), marks lines
that are never touched again. Such lines are not kept at all: when they leave SRAM they go
straight back to L2.

The SRAM side must never wait for the slow bank. Three pieces make that possible:

* **Tag queue.** Every STT-MRAM operation is a command in a 16-entry queue.
* **Swap buffer.** Every line on its way into STT-MRAM waits in a 3-line buffer.
* **Matched order.** The queue and the buffer are consumed in the same order. Data and command
  therefore pair up by order, with no search of the buffer's data.

This repository holds synthesizable SystemVerilog for the whole L1 data cache of one streaming
multiprocessor, plus self-checking testbenches. It does not include the cores, the
interconnect, L2 or DRAM.

## Block map

```
                 core requests / responses
                          |
                  +-------v--------+      +-----------------+
                  |   front end    |----->|   sram_bank     |  16 KB, 2-way, LRU
                  | (in fuse_l1d)  |<-----|                 |
                  +---+----+---+---+      +-----------------+
      arbitrator <----+    |   | victims (non-WORO)      ^ installs / migrations
      (decisions)          |   v                         |
  rl_sampler ->            |  swap_buffer (3 x 128 B)    |
  rl_history_table         |   |                         |
  (read level per PC)      v   v                         |
                  +------------------+                   |
                  |  tag_queue (16)  |  R / F / W commands
                  +--------+---------+                   |
                           v                             |
                  +------------------+    +------------------------------+
                  | STT-MRAM side    |--->| assoc_approx: 512 tags,      |
                  | (in fuse_l1d)    |    | 128 rows x 4, nvm_cbf filters|
                  +--+-----------+---+    +------------------------------+
                     |           |        +------------------------------+
                     |           +------->| stt_data_array: 512 x 128 B  |
                     v                    | 1-cycle read, 5-cycle write  |
                   mshr (32 entries, bank ID per entry) <-> L2 request / fill / write-back
```

| File | Role |
|---|---|
| `fuse_pkg.sv` | Line and address types, command and class encodings, event-counter struct |
| `fuse_l1d.sv` | Top: front end, STT-MRAM side, routing of data and victims, event counters |
| `sram_bank.sv` | SRAM tags, data, dirty bits, LRU; victim shown on the fill address |
| `stt_data_array.sv` | STT-MRAM data lines; write busy for 5 cycles |
| `assoc_approx.sv` | STT-MRAM tag array, polling logic, 4 comparators, FIFO replacement |
| `nvm_cbf.sv` | 128 counting Bloom filters (64 two-bit counters each, 3 hashes) |
| `tag_queue.sv` | 16-entry command FIFO |
| `swap_buffer.sv` | 3-line data FIFO paired with the F commands; address match for reads that miss |
| `rl_sampler.sv` | Sampler of 4 warps: 4 sets x 8 entries |
| `rl_history_table.sv` | 512 counters and R/W bits indexed by PC signature; class lookup |
| `mshr.sv` | Miss registers with destination bank, merging, landing state |
| `arbitrator.sv` | Decision rules for front end, STT-MRAM side and victims; bus priority; status registers |

## The read-level predictor

Only warps 0, 12, 24 and 36 (of 48) are watched. Each of these warps owns one set of the
sampler. A set has eight entries, and each entry holds:

* a valid bit and a "used" bit (U);
* a 3-bit LRU age;
* 15 bits of the line address;
* a 9-bit signature: the low 9 bits of the PC that touched the line last.

The sampler reacts to each access as follows:

* **Sampler hit.** U is set, and the history-table counter of the stored signature goes down by
  one. The R/W bit of that entry is set to the type of the hitting access. The entry then takes
  the hitting PC's signature.
* **Miss that replaces an entry never reused (U = 0).** The counter of the old signature goes up
  by one. A replaced entry with U = 1 leaves no trace.

The history table has 512 entries. Each counter starts at 8, with the R/W bit at R. Every PC,
sampled or not, is classified by its signature:

| counter | R/W bit | class | where its lines go |
|---|---|---|---|
| > 14 | any | WORO | fill to SRAM; SRAM victim is dropped (clean) or written back (dirty) |
| 0 | R | WORM | fill to STT-MRAM; write miss allocated in STT-MRAM |
| 0 | W | WM | fill to SRAM; a write hit in STT-MRAM moves the line to SRAM |
| 1..14 | any | neutral | fill to SRAM; SRAM victim goes to STT-MRAM |

The original proposal names the range 2..13 as neutral and leaves 1 and 14 unassigned. Here
they count as neutral.

The class of a request is looked up once, when the request is first seen. It then travels with
the request's tag-queue command and MSHR entry. The class of an SRAM victim is looked up when
it is evicted, using the signature stored with the line. Each SRAM and STT-MRAM tag keeps the
9-bit signature of the PC that filled or last wrote the line.

## Searching 512 tags with four comparators

STT-MRAM replacement is FIFO over all 512 lines: any line can live anywhere. The tag array is
read one row of four tags per cycle. Reading all 128 rows would take 128 cycles, so each row has
its own counting Bloom filter.

**Filter update.** Inserting a line into a row adds 1 to three counters of that row's filter.
The three positions come from three multiplicative hashes of the line address: multiply by an
odd constant mod 2^25 and keep the top 6 bits. Removing a line subtracts 1 from the same three
counters. One insertion replaces the FIFO victim in the same row, so a single filter gets +1 and
-1 in the same cycle.

**Search timing.** A search runs as follows:

1. **Cycle 0.** All 128 filters are tested at once. The three hashed counters of every filter
   are read, and a filter is "positive" when none of the three is zero. The positive rows are
   latched as a to-do mask.
2. **Cycle 1 onward.** The lowest row still in the mask is read and its four tags compared. The
   row is then struck off the mask.
3. **Done.** The search ends on a match, or when the mask is empty (a miss).

A line whose filter answers first therefore costs 2 cycles, and each false-positive row costs
one more. With 64 counters per filter, 4 lines per filter and 3 hashes, a random 512-line fill
measured 2.3 cycles per hit on average, and 8 at worst.

**Counter overflow.** The counters are only 2 bits wide. A counter that reaches 3 stays at 3 for
good: it is never decremented again. A filter can therefore claim a line it does not hold, which
costs an extra poll. It can never deny a line it holds, which would lose data.

**Filter size.** The original text gives both 16 and 64 counters per filter. With 16, about 15%
of all filters are positive for an absent line, so a search polls about 20 rows. That
contradicts the stated search time of one or two cycles. This design therefore uses 64. The
value is the `CBF_LEN` parameter of `nvm_cbf`, `assoc_approx` and `fuse_l1d`.

## Two engines and a queue

`fuse_l1d` runs two state machines that share only the tag queue, the swap buffer, the MSHR and
the response bus.

### Front end

The front end takes one request at a time when `req_ready` is high. It looks the request up in
SRAM in the following cycle, and the arbitrator picks one of these actions:

* **SRAM hit.** The request is served at once. A read is answered 1 cycle after acceptance. A
  write updates the line and is acknowledged in the same cycle.
* **Read miss with the line already requested from L2.** The request is attached to that MSHR
  entry (a merge).
* **Other read miss.** An R command is queued and the front end moves on.
* **Write miss.** The write waits until three things are empty: the tag queue, the STT-MRAM side
  and the MSHR. Then a W command is queued and the front end waits for it to complete. A queue
  command holds no write data, so the front end holds it.

A request that has to wait is parked and looked up again. L2 fills are taken in the meantime,
because the parked request may be waiting for exactly that fill (a write waiting for the MSHR to
empty is the obvious case). Fills have priority over new requests.

Two room rules keep the STT-MRAM side from ever waiting on the front end:

* one tag-queue slot is kept free for replays;
* a read is queued only while the MSHR has a free entry for every read already queued.

### Fills and evictions

A fill whose MSHR destination is SRAM is installed there. The SRAM victim is shown in the same
cycle and routed by its class:

* WORO and clean: dropped.
* WORO and dirty: written back on `wb_*`.
* Anything else: pushed into the swap buffer, and an F command is queued.

A fill whose destination is STT-MRAM does not touch SRAM. It is pushed into the swap buffer with
an F command, so there is only one path into STT-MRAM. Its MSHR entry is marked "landing" until
the F command has written the line.

Every waiting request ID in the entry is answered at fill time, one per cycle.

### STT-MRAM side

The STT-MRAM side pops one command, runs the tag search and then acts:

| command | search result | action |
|---|---|---|
| R | hit | read the line (1 cycle), answer on the bus (SRAM has priority) |
| R | miss, MSHR entry with room | merge into it |
| R | miss, MSHR entry landing or full, or line waiting in the swap buffer | re-queue the R at the tail (replay) |
| R | miss, no entry | allocate MSHR entry with destination bank (WORM: STT-MRAM, else SRAM), request L2 |
| W | hit, class WM | invalidate in STT-MRAM, hand the line to the front end to install in SRAM |
| W | hit, other class | write in place (5 cycles), mark dirty, acknowledge |
| W | miss, class WORM | allocate the FIFO slot in STT-MRAM and write there |
| W | miss, other class | hand to the front end to allocate in SRAM |
| F | hit | overwrite the line from the swap-buffer head |
| F | miss | take the FIFO slot. A dirty FIFO victim is first read (1 cycle) and written back to L2, then the swap-buffer head is written |

Commands run one at a time, so "no snooping" holds. An F command always finds its data at the
swap-buffer head: both FIFOs are filled together and drained together. A read that misses in
STT-MRAM while its line still waits in the swap buffer is re-queued behind that line's F command
(the replay row above), and so finds the line in STT-MRAM on its second pass.

### Latency

The cycle counts below were checked by the end-to-end test:

* **SRAM read hit:** answered 1 cycle after acceptance.
* **STT-MRAM read hit on an idle cache:** 6 cycles when the first polled row matches, and 1 more
  per extra row. The cycles are: look-up, queue, pop and filter test, poll, decide, 1-cycle
  read, then the answer.
* **STT-MRAM write:** blocks the data array for 5 cycles. Only the STT-MRAM side waits; the
  front end keeps serving SRAM hits.

## Interfaces of `fuse_l1d`

| Port group | Signals | Notes |
|---|---|---|
| Core request | `req_valid`/`req_ready`, `req_addr[31:0]`, `req_pc[31:0]`, `req_warp[5:0]`, `req_write`, `req_wdata[1023:0]`, `req_rid[7:0]` | One whole 128-byte line per request |
| Core response | `rsp_valid`, `rsp_rid`, `rsp_write`, `rsp_data` | No back-pressure. A write is answered with `rsp_write = 1`. Responses may come back out of order; match them by ID |
| L2 miss | `l2_req_valid`/`l2_req_ready`, `l2_req_addr`, `l2_req_id` | `l2_req_id` is the MSHR index |
| L2 fill | `l2_fill_valid`/`l2_fill_ready`, `l2_fill_id`, `l2_fill_data` | The fill must return the MSHR index |
| Write-back | `wb_valid`/`wb_ready`, `wb_addr`, `wb_data` | Dirty SRAM WORO victims and dirty STT-MRAM FIFO victims |
| Event counters | `perf` | 16 counters, one per mechanism; see `fuse_pkg.sv` |

There is one clock. Reset is asynchronous and active low.

Parameters, with the defaults of the original design:

| Parameter | Default | Meaning |
|---|---|---|
| `SRAM_SETS` / `SRAM_WAYS` | 64 / 2 | SRAM bank geometry |
| `STT_LINES` | 512 | STT-MRAM lines |
| `STT_WR_CYC` | 5 | STT-MRAM write time |
| `N_CMP` | 4 | Tag comparators |
| `CBF_LEN` | 64 | Counters per filter |
| `N_HASH` | 3 | Hash functions |
| `TQ_DEPTH` | 16 | Tag queue |
| `SB_ENTRIES` | 3 | Swap buffer |
| `PHT_N` | 512 | History-table entries |
| `UNUSED_TH` | 14 | WORO threshold |
| `MSHR_N` / `MSHR_MERGE` | 32 / 8 | Not given in the original; chosen here |

## Where this RTL departs from the original description

* **No parallel bank lookup.** The original looks up both banks in parallel, and cancels the
  STT-MRAM search on an SRAM hit. Here the STT-MRAM search starts only after an SRAM miss,
  through the tag queue. An SRAM hit costs the same. An STT-MRAM hit costs the queue hop.
* **Drain instead of flush.** "Flushing" the tag queue before a store to STT-MRAM data is done
  as draining: the write waits until all queued commands and all outstanding misses have
  finished. No request is dropped.
* **WM lines migrate on write hits only.** The original moves a line predicted WM out of
  STT-MRAM on any hit. Here a read hit on such a line is served in place, and only a write hit
  migrates it.
* **Fills into STT-MRAM go through the swap buffer.** These are the fills predicted WORM. The
  original only says that the MSHR destination bits steer them.
* **Landing state and replays.** A read that meets a line still on its way into STT-MRAM is
  re-queued. Reads that cannot yet be sure of an MSHR entry are not queued.
* **Filter size.** 64 counters per filter, not 16 (see above). The hash functions are this
  design's own.
* **History table size.** 512 entries, as in the predictor description. The configuration table
  of the original gives 1024.
* **Buses not modelled.** Lines move whole in one clock. The original's 700 MHz, 128-byte core
  bus and 1.4 GHz, 64-byte internal bus are not modelled. Byte enables are not modelled either.
* **Circuits are behavioural.** MTJ cells, sense amplifiers, write drivers and the analog
  zero-test of the filter counters are register arrays and comparisons here.
* **Known ordering limits.**
  * A read queued for STT-MRAM can be answered with data written after it was issued. This
    happens when a later write hits the same line in SRAM before the read reaches the head of
    the queue.
  * A read can miss in STT-MRAM while its own line, possibly dirty, still waits in the swap
    buffer. This needs two reads of the same line queued close together, with the line filled,
    written and evicted from SRAM between them. The original design has no answer for it. Here
    each swap-buffer register keeps its line address, and three comparators check the missing
    read against them. On a match the read is replayed behind the F command instead of going to
    L2. The comparison is on addresses only; data still pairs with commands by order.

## Simulating

Every testbench prints one line `TB_RESULT checks=N failures=M` and stops. Each also has a
watchdog that ends the run with a failure. Compile any testbench with plain Verilator, giving
the package first, then the modules, then the testbench:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/fuse_pkg.sv rtl/sram_bank.sv rtl/stt_data_array.sv rtl/nvm_cbf.sv rtl/assoc_approx.sv \
  rtl/tag_queue.sv rtl/swap_buffer.sv rtl/rl_sampler.sv rtl/rl_history_table.sv rtl/mshr.sv \
  rtl/arbitrator.sv rtl/fuse_l1d.sv tb/tb_fuse_l1d.sv --top-module tb_fuse_l1d -o sim
./obj_dir/sim
```

`tb_fuse_l1d` runs the whole cache at its default size, with no parameter overrides. It uses a
behavioural L2 with a random latency of 20..80 cycles (2..4 in one phase). It trains four PCs,
one for each class, then runs directed phases and 4000 random requests. It finishes in well
under a second.

The test checks:

* every response: ID, type, and data against a versioned reference memory;
* the SRAM-hit and STT-MRAM-hit latencies;
* that each of the 16 event counters, and the write-back port, saw at least one event. Examples
  are merges, replays, migrations, in-place writes, STT-MRAM allocations, dirty STT-MRAM
  write-backs, drain and queue stalls, and extra polls.

One run gave 8750 requests, 5766 L2 misses, 1454 STT-MRAM read hits, 144 migrations and 841
STT-MRAM write-backs.

The unit testbenches and what each compares against:

| Testbench | Compared against |
|---|---|
| `tb_sram_bank` | Hand-worked LRU, dirty and victim cases |
| `tb_stt_data_array` | Exact 5-cycle busy window and 1-cycle read |
| `tb_nvm_cbf` | Reference counters with the same hash formula; no false negatives |
| `tb_assoc_approx` | 512 inserts; every line found in the right slot with latency 1 + rows polled; average search length bounded; absent lines rejected; FIFO wrap, invalidate, dirty marking |
| `tb_tag_queue`, `tb_swap_buffer` | Reference queues |
| `tb_rl_sampler` | Per-set recency lists |
| `tb_rl_history_table` | Reference counters; all four classes reached |
| `tb_mshr` | Reference table under random allocate, merge, issue, land and release |
| `tb_arbitrator` | All input combinations against the decision rules |

Unit testbenches may be built the same way, with only the modules they use.
