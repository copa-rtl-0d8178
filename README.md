# CoPA: bounding how long a journal page sits unwritten in STT-MRAM

An I/O buffer cache in DRAM loses its dirty pages on a power failure. A common fix is an
**NVB-Buffer** (NVM-backed buffer). It pairs the DRAM buffer with a small non-volatile
**Persistent Journal Area (PJA)** that holds a copy of every dirty page. After a crash, the
PJA is read back and nothing is lost.

If the PJA is STT-MRAM, a new risk appears: **retention failure**. An MTJ cell slowly loses
the value it was written with. The chance that a page is lost grows steeply with the time
since the page was last written, its *idle time*. With periodic flushing switched off, as
modern NVB-Buffers do to save storage traffic, a dirty page can sit untouched in the PJA for
more than an hour.

**CoPA (Cold Page Awakening)** puts a hard upper bound on that idle time:

- Every PJA page is rewritten at least once every three *time-steps*. A time-step is a
  configurable period, 30 s by default.
- The rewrite copies the page from its DRAM replica. The PJA copy is never read, which
  would add read disturbance.
- Pages the host wrote recently are skipped, so refresh traffic stays small.

The bookkeeping is two queues and a 2-bit counter. The hardware here is the controller side
of such a buffer. It implements the buffer and journal bookkeeping, the CoPA queues and
counter, the page-refresh engine and the SEC-DED code on journal words. The DRAM, the
STT-MRAM, the backing storage and the engine that moves page data sit outside on ports.

The design follows the CoPA paper (Sleepy/Awake queues, State_Counter, Distant Refreshing,
NVB-Buffer policy). Where the paper is silent, the choices are this implementation's own.
They are marked as such below and in each file's opening comment.

## 1. The idea in one timeline

Time is cut into time-steps of length T. Pages written into the PJA are recorded in one of
two queues, **Q1** and **Q2**. At any moment one queue is called **Sleepy** and the other
**Awake**. A 2-bit **State_Counter** increments at the end of every time-step:

| State_Counter | QI (MSB): Sleepy queue | DC (LSB): new writes go to | at the end of this step |
|---|---|---|---|
| 00 | Q1 | Sleepy (Q1) | nothing |
| 01 | Q1 | Awake (Q2) | refresh every page in Q1 |
| 10 | Q2 | Sleepy (Q2) | nothing |
| 11 | Q2 | Awake (Q1) | refresh every page in Q2 |

- **QI** (Queue Identifier) names the Sleepy queue. Flipping it relabels the queues without
  moving a single entry.
- **DC** (Drowsiness Categorizer) decides where new writes go:
  - DC=0: into the Sleepy queue;
  - DC=1: into the Awake queue.

A refresh happens every second time-step, so the **refresh period is 2T**. In each refresh,
only the Sleepy queue is rewritten.

Take a page last written in a step with DC=0, say step 00, which puts it in Q1:

- Q1 is refreshed at the end of step 01, between T and 2T after the write.
- Had the page been written in step 01 instead, it would have gone to Q2, the Awake queue.
  Q2 is Sleepy in steps 10 and 11 and is refreshed at the end of step 11. That is more than
  2T and less than 3T after the write.

So pages written in the first half of a refresh period are refreshed at the end of that
period. Pages written in the second half wait for the next period. Neither case is refreshed
less than T after its write. Every page is rewritten before it has been idle for 3T: the
**idle-time bound is T < T_idle < 3T**, with about 2T on average.

### Where a refreshed page goes

A refreshed page has just been written, so it must restart its clock. The paper's worked
example draws the refreshed page staying in its queue. Read literally, that is a problem:
each queue is refreshed only every other refresh period, once every 4T (Q1 at the end of
step 01, Q2 at the end of step 11, Q1 again four steps later). A page that stayed in its
queue would then wait 4T between refreshes. That contradicts the 3T bound the paper states
and measures: 14.95 min for T = 300 s.

This design takes the bound as the requirement. **During a refresh walk each page of the
Sleepy queue is moved to the other queue**, the one that is Sleepy in the next period. That
queue is the one an ordinary write gets at the start of the next time-step, so a refreshed
page behaves exactly like a freshly written one. The walked queue ends empty.

The paper's own five-page example shows the difference. Pages A and B are written in step
00; C and B (again) in step 01; D in step 10; E in step 11. The paper refreshes A at the end
of step 01, then C, B and D at the end of step 11. Here A is moved to Q2 by its first
refresh and so is refreshed again with C, B and D. That is 2T after its last rewrite,
rather than the 4T the figure implies. The price is a few more refreshes of pages nobody
writes; the gain is that the stated bound holds.

The end-to-end testbench measures the consequence. With T = 400 cycles, the largest idle
time any journal page ever reached was 1024 cycles, against a bound of 3T = 1200.

## 2. The NVB-Buffer underneath

The buffer manager (`nvb_buffer_manager`) keeps two LRU structures:

- the **buffer**: 2^21 DRAM page slots = 8 GB of 4 KB pages;
- the **PJA**: 2^17 STT-MRAM page slots = 512 MB.

A page in the PJA is always dirty and always also in the buffer. The rules for one request:

| event | what happens |
|---|---|
| read hit | DRAM → host. The page becomes most recently used in the buffer and, if dirty, in the PJA as well. |
| read miss | A buffer slot is freed if needed (below), and the page is filled from storage as a clean page. |
| write (hit or miss) | The page is written into its DRAM slot and into a PJA slot, and becomes dirty. The PJA slot is the page's own or a free one, else the LRU PJA page is evicted. |
| buffer eviction of a dirty page | The page is flushed to storage and its PJA slot is freed. |
| PJA eviction | The page is flushed to storage. Its DRAM copy stays buffered, now clean. |

Each write is reported to the queue manager as an insert. Each page that leaves the PJA is
reported as an invalidate.

The paper's algorithm only names invalidation for dirty buffer evictions. A page pushed out
of the PJA also has nothing left to refresh, so this design invalidates it too.

**How lookups work.** This is a choice of this design, and the place to change first if
speed matters. The directory is two RAM tables, one row per DRAM slot and one per PJA slot.
Each row holds a valid bit, the page tag, a dirty bit, the linked slot and a 48-bit access
stamp; LRU order is "smallest stamp".

A request makes one sequential pass over both tables, one row of each per cycle. In that
pass it finds the hit, the first free row and the LRU row of each table. The pass takes
`max(BUF_PAGES, PJA_PAGES)` cycles: 2^21 at the default size, about 21 ms at 100 MHz. It is
the simplest complete search and it is correct, but it is a placeholder. The paper
specifies the policy, not a directory structure. A hashed or CAM-based directory with linked
LRU lists would drop in behind the same ports.

The buffer manager never touches page data. It issues page-move commands (`dma_*`) to an
external data mover:

| command | meaning |
|---|---|
| `DMA_HOST_WR` | host page → DRAM slot and PJA slot (journal write) |
| `DMA_HOST_RD` | DRAM slot → host |
| `DMA_FILL` | storage → DRAM slot |
| `DMA_FLUSH` | DRAM slot → storage |

A command counts as done when it is accepted. The mover must therefore finish moves in
order, and finish each one before the refresh engine touches the same slot. In the top
level this holds because refreshes and buffer traffic never overlap (section 5).

## 3. Queue manager: two queues without searching them

`copa_queue_manager` holds Q1 and Q2. Each is a `copa_queue`, and each entry stores:

- the page address;
- the page's DRAM slot;
- the page's PJA slot.

The paper stores only the address. The two slots are kept so that a refresh needs no second
lookup.

**Dense queues with swap-remove.** The paper says a rewritten page's old queue entry is
"invalidated". Leaving invalid entries in place would let a queue grow without bound and
make the refresh walk skip holes. Instead, a queue is kept dense:

- A push appends at position `count`.
- Removing the entry at position p moves the last entry into p.

Order inside a queue has no meaning, because a whole queue is always refreshed together.
This is why the swap is allowed. Each queue therefore never holds more entries than there
are PJA pages.

**Location table.** To find a page's entry without a search, a table indexed by PJA slot
records `(valid, queue, position)`. It is updated on every insert, remove and swap.

A write (`QM_INSERT`) is handled in one cycle:

1. Look up the slot.
2. Remove the old entry if there is one.
3. Append to the queue named by `QI xor DC`.

When the old and new entries are in the same queue, the entry is overwritten in place. This
avoids a remove and a push in the same queue in one cycle.

**The refresh walk.** When the counter requests a refresh:

- The manager goes busy, and the buffer manager is stalled (section 5).
- It offers the pages of the Sleepy queue one per cycle, through a valid/ready handshake, to
  the refresh engine. This is the refresh multiplexer of the paper's overview, picking Q1
  or Q2 by the QI that was valid in the ending time-step.
- It pushes each page into the other queue and updates the location table.
- At the end it clears the walked queue.

A refresh request that arrives while a walk is still going on (a very short time-step) is
remembered and served next.

After reset, the location table's valid bits are cleared by a sweep of `PJA_PAGES` cycles.

## 4. Distant Refreshing

`distant_refresh_engine` rewrites one PJA page from its DRAM replica. For each of the 512
words it:

1. issues a DRAM read of word `{buf_slot, i}`;
2. waits for the data;
3. writes word `{pja_slot, i}` of the PJA.

It never reads the PJA. The DRAM copy is by construction the correct content of every
journal page, so the PJA copy is overwritten whether or not it has decayed. A page with
retention errors is simply healed.

Timing: one word is in flight at a time, which gives 3 cycles per word with zero-wait
memories, or 1536 cycles per 4 KB page. `done_o` pulses on the last word. The word-serial
schedule and the valid/ready memory ports are choices of this design. The paper gives only
the source, the destination and the fact that no read-check is done.

## 5. The top level

```
            req/rsp                               dma_* (to the data mover)
 host ───────────────► nvb_buffer_manager ──────────────────────────────►
                          │ QM_INSERT / QM_INVALIDATE
                          ▼
 copa_state_counter ──► copa_queue_manager ── Q1 / Q2 ─┐ (refresh mux)
   (timer, QI, DC,        ▲ QI, DC, refresh            ▼
    refresh request) ─────┘                   distant_refresh_engine
                                             dram_rd_* ◄┘    └► secded_enc ► pja_wr_*
 pja_jnl_data_i ► secded_enc ► pja_jnl_code_o    pja_rec_code_i ► secded_dec ► data, ce, ue
```

`copa_top` instantiates all of this. The external parts connect on ports:

| port group | connects to |
|---|---|
| `req_*`, `rsp_*` | host requests, one page each |
| `dma_*` | the data mover |
| `dram_rd_*` | DRAM read port for refreshes |
| `pja_wr_*` | PJA write port for refreshes, carrying 72-bit codewords |
| `pja_jnl_*` | an encoder the data mover uses for host journal writes, so that every PJA word is written in the same code |
| `pja_rec_*` | the decoder for reading the journal back after a power failure |
| status and event outputs | `state_counter_o`, `refresh_*`, queue counts, eviction pulses |

**Refreshes and host traffic do not overlap.** While the queue manager is walking a queue
or the refresh engine is copying a page, both outputs of the buffer manager are held back:

- its queue-manager commands;
- its page moves (`dma_valid_o` low, ready withheld).

A request in progress therefore stalls until the refresh ends. This ordering keeps a
refresh and a host write to the same page from racing. It is also the cost CoPA adds to
response time. The paper quantifies that cost as small but does not specify the
arbitration, so this policy is this design's own.

At the default T = 30 s, a full PJA refresh is at most 2^17 pages × 1536 cycles ≈ 2 s at
100 MHz. That is well inside the 60 s refresh period.

**Time.** The time-step is counted in clock cycles, `TIMESTEP_CYCLES`, with 64 bits. The
default of 3·10^9 is 30 s at an assumed 100 MHz. The paper's other settings, 90, 150 and
300 s, are 9·10^9, 1.5·10^10 and 3·10^10 cycles and fit the same counter.

## 6. SEC-DED on journal words

Each 64-bit PJA word is stored as a 72-bit SEC-DED codeword, as the paper specifies. The
paper names the code but not its matrix. This design uses an **extended Hamming code**:

- Bit 0 is overall parity.
- Bits 1..71 are Hamming positions:
  - positions 1, 2, 4, …, 64 are check bits;
  - the other 64 positions hold data bits 0..63 in ascending order.
- Check bit 2^k makes the parity of every position with bit k set even.

Decoding (`secded_dec`):

- The syndrome is the XOR of the positions of all set bits.
- Odd overall parity means one flipped bit: it is corrected at the syndrome position.
- Even parity with a non-zero syndrome means two flips: flagged uncorrectable.
- A syndrome beyond position 71 is also flagged uncorrectable.

Both coders are combinational. Any other SEC-DED(72,64) code, such as Hsiao, can be swapped
in behind the same ports.

## 7. Files

| file | what it is |
|---|---|
| `rtl/copa_pkg.sv` | sizes (defaults = 8 GB / 512 MB / 4 KB / 64-bit words / 30 s), command enums, SEC-DED width function |
| `rtl/copa_state_counter.sv` | time-step timer and State_Counter |
| `rtl/copa_queue.sv` | one dense queue |
| `rtl/copa_queue_manager.sv` | Q1, Q2, location table, refresh walk |
| `rtl/distant_refresh_engine.sv` | DRAM → PJA page copy |
| `rtl/nvb_buffer_manager.sv` | LRU buffer and PJA directory and policy |
| `rtl/secded_enc.sv`, `rtl/secded_dec.sv` | SEC-DED(72,64) |
| `rtl/copa_top.sv` | the controller |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_copa_top_full.sv` | the controller at its default sizes |

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

Memory at the default sizes is about 238 Mbit of table RAM, almost all of it the buffer
directory:

- 2^21 rows of tag, slot, stamp and flags;
- the two queues and the location table.

This is why the top level is heavy to simulate at full size.

## 8. Simulating

With Verilator 5 (the package file comes first):

```
verilator --binary --timing -Wno-fatal \
  rtl/copa_pkg.sv rtl/secded_enc.sv rtl/secded_dec.sv rtl/copa_queue.sv \
  rtl/copa_queue_manager.sv rtl/copa_state_counter.sv rtl/distant_refresh_engine.sv \
  rtl/nvb_buffer_manager.sv rtl/copa_top.sv tb/tb_copa_top.sv --top-module tb_copa_top
./obj_dir/Vtb_copa_top
```

For a single block, list the package, the block and its testbench.

| testbench | sizes | what it establishes |
|---|---|---|
| `tb_copa_state_counter` | T = 7 cycles | over 40 time-steps, checked every cycle: counter sequence 00→01→10→11, tick every T, refresh only when DC=1, refresh queue = QI of the ending step |
| `tb_copa_queue` | 8 entries | 3000 random push, overwrite, swap-remove and clear operations against a reference model, whole content checked after each |
| `tb_copa_queue_manager` | 8 PJA slots | the paper's five-page example (pages A–E over four time-steps), random inserts and invalidations under every QI/DC value against a reference model, refresh walks under random back-pressure (exactly the walked queue's pages, moved to the other queue), a refresh request arriving during a walk |
| `tb_distant_refresh_engine` | 16-word pages | corrupted PJA pages overwritten by their DRAM replicas, no other PJA page touched, random memory delays and back-pressure, exactly 3 cycles per word without stalls |
| `tb_nvb_buffer_manager` | 4-page buffer, 2-page PJA | the paper's access-pattern example step by step, then 3000 random requests against an LRU reference model (hits, commands, events) |
| `tb_secded_enc` / `tb_secded_dec` | 64 → 72 | code layout and parity groups, minimum distance 4, hand-worked codewords; all single flips corrected, double flips detected |
| `tb_copa_top` | 8-page buffer, 4-page PJA, 8-word pages, T = 400 cycles | random reads and writes over 12 pages with behavioural DRAM, PJA, storage and data mover, plus random single and double bit flips in the PJA; see below |
| `tb_copa_top_full` | defaults | reset sweep, a write, a read hit and a read miss, with commands, queue insert, 2^21-cycle lookups and ECC round trip |

`tb_copa_top` checks:

- read data;
- that no journal page stays idle for 3T or more, plus the time its refresh waits behind
  other page copies;
- that every refreshed page equals the encoded host data;
- that the recovery decoder corrects single flips and flags double flips;
- that three time-steps after traffic stops, the whole journal is intact.

It counts every mechanism and fails if one never occurred:

- hits and misses;
- clean, dirty and PJA evictions;
- Sleepy and Awake inserts;
- refresh periods and queue-label swaps;
- requests stalled by a refresh;
- corrupted pages healed;
- errors corrected and detected.

A typical run reaches a maximum idle time of 1024 cycles against the bound of 1200.
`tb_copa_top_full` runs in well under a minute.

## 9. How far to trust it, and where it departs from the paper

These follow the paper:

- the State_Counter semantics (QI/DC, refresh when DC=1, increment every step);
- insert target = Sleepy if DC=0, else Awake;
- invalidation of a rewritten page's old entry;
- Distant Refreshing from DRAM without reading the PJA;
- the NVB-Buffer policy (both LRU, PJA eviction cleans the page, dirty buffer eviction
  frees the PJA copy);
- the sizes: 8 GB, 512 MB, 4 KB, 512 × 64-bit words, SEC-DED(72,64);
- the time-steps: 30 s default, with 90, 150 and 300 s as parameters.

These are this design's own:

- **Refreshed pages move to the other queue.** Section 1 explains why; this is the
  departure from the paper's figure that matters most.
- **Pages leaving the PJA by eviction are invalidated** in the queues.
- **Queue entries carry the DRAM and PJA slots**, plus the dense-queue and location-table
  scheme.
- **The directory is a full scan.** It is correct but slow: one request per 2^21 cycles at
  full size.
- **Page data moves through an external data mover.** Its commands are complete when
  accepted.
- **The arbitration**: refresh has priority and host requests stall.
- **The interfaces and reset**: valid/ready handshakes everywhere, asynchronous active-low
  reset, and table-clearing sweeps after reset.
- **The clock is 100 MHz**, which sets the time-step length in cycles.
- **The SEC-DED code is an extended Hamming layout.**

Not covered:

- the power-failure recovery procedure itself. Only the decoder for reading the journal
  back is provided.
- the memories and storage devices.
- the paper's baseline schemes: periodic flush, and operation without CoPA. They are
  comparisons, not part of the design. Without CoPA is this design with refresh disabled.

Verification is by simulation only (Verilator, two-state). There is no formal proof of the
idle bound. The bound is checked on random traffic at reduced sizes, and the full-size
configuration is exercised only for a few requests because each takes 2^21 cycles.
