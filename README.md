# CacheSquash cache hierarchy in SystemVerilog

A Spectre attack does not need its transmit load to finish. It only needs the
load to reach the cache hierarchy before the misprediction is found. The
processor squashes the load, but the miss is already on its way. When the
data comes back from memory it is installed in L1 and L2 anyway. That change
of cache state is what a Flush+Reload receiver measures.

CacheSquash closes part of that window. When a core squashes a load (or an
instruction fetch) that is still waiting for memory, it sends a
**cancellation** after the request. Each cache on the path does the
following with it:

* It looks for the MSHR that holds the block (*MatchMSHR*) and removes the
  cancelled request from it.
* If the MSHR is now empty, it frees the MSHR and passes the cancellation on
  to the next level. The last-level cache stops it, because memory has no
  cancellation channel.
* When a response arrives, the cache checks that the MSHR named in the
  response still waits for that block (*CheckMSHR*). If it does not, the
  response is thrown away, so the tag array, data array and replacement
  state stay as they were.

Victims are chosen only when a fill happens. A cancelled miss therefore
evicts nothing either.

How well this works depends on a race between the cancellation and the
response:

| case | what the cancellation reaches in time | cache state after the squash |
|---|---|---|
| best | L1 and the L2 (the last-level cache) | unchanged; a reload goes to memory |
| intermediate | L1 only; the L2 already has the data | L2 holds the line, L1 does not |
| worst | nothing (the data was back before the squash) | L1 and L2 hold the line |

This RTL implements the hierarchy of a 4-core system:

* per core, a 32 kB 2-way L1I and a 64 kB 2-way L1D;
* one shared L2 of 2 MB per core (8 MB), 8-way;
* latencies of 1, 2 and 20 cycles;
* 64-byte lines;
* the core-side logic that turns a squash into cancellations.

The core and main memory are outside the design.

## Block structure

```
 core c fetch ──► spec_req_tracker ──► cs_cache (L1I, IS_LLC=0) ─┐
 core c LSU   ──► spec_req_tracker ──► cs_cache (L1D, IS_LLC=0) ─┤  x NCORES
                                                                  ▼
                                    l2_xbar (req / cancel / wb channels, responses)
                                                                  ▼
                                         cs_cache (L2, IS_LLC=1, NCORES x 2 MB)
                                                                  ▼
                            memory port: read request, write-back, response
                                         (no cancellation channel)
```

| file | role |
|---|---|
| `rtl/cs_pkg.sv` | widths, message structs (`req_t`, `resp_t`, `cancel_t`, `wb_t`, core-side structs), MSHR operation codes, event strobes |
| `rtl/mshr_file.sv` | MSHRs with target lists, MatchMSHR, target removal, CheckMSHR, fill buffer |
| `rtl/cs_cache.sv` | one cache level, used for L1I, L1D and the L2 |
| `rtl/spec_req_tracker.sv` | outstanding-request table of one core requester; turns squashes into cancellations |
| `rtl/l2_xbar.sv` | round-robin crossbar from all L1s to the L2, one arbiter per channel |
| `rtl/cachesquash_top.sv` | wires everything together |

## Messages and ids

Every link between two levels has four channels. Three go down:
requests, cancellations and write-backs, each with valid/ready. Responses go
up with valid only. The cache above always accepts them.

Because cancellations have their own channel, a cancellation can travel down
while a response travels up. So a cache sometimes gets a cancellation for a
request it has already answered. MatchMSHR finds nothing and the
cancellation is dropped.

The id carried by a message is 16 bits:

* **Tracker to L1:** `{generation, entry}` of the tracker's table.
* **L1 to crossbar:** the L1's MSHR index.
* **Crossbar to L2:** the crossbar writes the source number into `id[15:8]`.
  The sources are L1I of core c = `2c`, L1D of core c = `2c+1`.
* **L2 to memory:** the L2's MSHR index. Memory copies it into its response.

A cancellation carries the address and the id of the request it cancels. A
cache finds the MSHR by the block address, and finds the target in it by the
id.

## The MSHR file

`mshr_file` has NMSHR entries. Each entry holds:

* a block address;
* a target list of up to NTGT requests, kept in arrival order;
* a *filled* flag and a line buffer.

A second miss to the same block becomes a new target (coalescing).

It offers these views, all combinational:

* **MatchMSHR** compares a block address against all valid entries. It
  serves both new misses and cancellations. It also reports whether the
  entry is already filled and whether its target list is full.
* **Remove** reports whether the target with a given id is in a given
  entry, and whether removing it would leave the entry empty.
* **CheckMSHR** takes the index from a response id and the response's block
  address. It is true only if that entry is valid, not yet filled, and holds
  that block. A response for an MSHR that was freed by a cancellation fails
  the check, and so does one for an MSHR already reused for another block.
  This is exactly what makes late memory responses harmless at the L2.
* **Drain** shows the lowest filled entry and its oldest target, so the
  cache can answer one target per cycle.

Only one operation is applied per clock: allocate, add target, remove
target, fill, or pop. An entry is freed when its last target is popped or
removed.

## One cache level (`cs_cache`)

### Pipeline and priorities

Requests, cancellations and write-backs from above enter together, one of
each per cycle, through an input pipeline of `LAT` stages. A cancellation
therefore takes as long to reach the MSHR search as a request takes to reach
the tags.

Each cycle the cache does exactly one of the following, in this priority
order:

1. **Fill.** A response arrived from below. This has the highest priority
   and is never stalled. CheckMSHR decides what happens:
   * If it fails, the response is discarded and nothing in the cache
     changes.
   * If it passes, the victim way is chosen now: the first invalid way,
     else the set's round-robin pointer. A dirty victim goes to the
     write-back queue. Store targets are merged into the line, and the line
     is written to the tag and data arrays. The MSHR is marked filled.
2. **Answer** the oldest target of a filled MSHR.
3. **Cancellation** at the head of the pipeline. It follows the
   flow chart:
   * no matching MSHR, or no such target → drop it;
   * target removed, MSHR not empty, or already filled → done;
   * MSHR now empty → free it, then:
     * last-level cache → stop here;
     * its miss request is still in the output register → withdraw that
       request (nothing has left, so nothing needs cancelling);
     * otherwise → send a cancellation downstream with this cache's MSHR
       index as id.
4. **Write-back** from above.
   * On a hit, the line is updated and marked dirty.
   * On a miss, it is passed down through the write-back queue.
5. **Request.**
   * A hit answers at once.
   * A miss to a block that already has an MSHR becomes a new target.
   * Otherwise a new MSHR is allocated and a read goes downstream.

If the head of the pipeline cannot proceed, the whole pipeline stops and all
three input `ready`s go low. This happens when no MSHR is free, a target
list is full, the output register is busy, or the write-back queue has no
room. The event output `ev` marks each case (`hit`, `miss_alloc`,
`coalesce`, `stall`, `fill`, `resp_discard`, `cancel_remove`,
`cancel_nomatch`, `cancel_fwd`, `cancel_llc`, `cancel_unsent`, `writeback`).

### Timing

* **Hit latency:** a hit is answered exactly `LAT` cycles after the request
  was accepted.
* **Miss latency:** at the default latencies (L1D 2, L2 20) with a 100-cycle
  memory, a miss is answered to the core 127 cycles after it was accepted.
* **Cancellation latency:** a cancellation accepted by the L1D reaches the
  L1 MSHRs 2 cycles later and the L2 MSHRs about 23 cycles later.

So the best case happens whenever the squash comes more than about 25
cycles before memory answers.

### Reset

The tag array is cleared one set per cycle after reset. `init_done` rises
when the sweep is done. No input is accepted before that. At full size the
L2 has 16384 sets, so the sweep takes 16384 cycles.

### Write policy

* The cache is write-back and write-allocate.
* A store miss is fetched from below as a read, and the store data is
  merged in at the fill.
* The write-back queue has as many entries as there are MSHRs. A new miss
  is allocated only if every pending fill would still find room there.
* A miss to a block whose write-back is still queued waits until the
  write-back has left. Otherwise the read could overtake the write-back and
  get old data.

## Core-side tracker (`spec_req_tracker`)

The original work adds this to the core's load-store unit: on a squash,
it checks for outstanding requests of the squashed instructions and cancels
them. This tracker is that function as a separate block, used once for the LSU and
once for instruction fetch of every core.

**Entries.** The tracker has NENT entries, each holding one outstanding
request with its sequence number, address and operation.

**Squash.** A squash gives the sequence number of the oldest squashed
instruction. Every outstanding load or fetch that is the same or younger is
marked. Then one cancellation per cycle goes out, lowest entry first. The
entry is freed when its cancellation is accepted.

**Stores** are never cancelled. They are taken to come from retired
instructions.

**Late responses.** A response that comes back for a marked entry, or in the
same cycle as the squash, is dropped. The entry is then free, and its
cancellation is never sent. The generation bits in the id protect a reused
entry from a response of its previous owner.

**Squash in the issue cycle.** A request that is squashed in the cycle it
is offered is dropped without being sent.

**Data.** Responses carry whole lines. The tracker delivers the 64-bit word
selected by `addr[5:3]`.

## Crossbar (`l2_xbar`)

The crossbar takes requests, cancellations and write-backs from the
`2*NCORES` L1s. Each channel has its own round-robin arbiter. So a
cancellation never waits behind another cache's request, and a request and a
cancellation can enter the L2 in the same cycle.

Responses from the L2 go to the source named in `id[15:8]`, and that byte is
cleared on the way. The crossbar is combinational. Only the round-robin
pointers are registers.

## Top level (`cachesquash_top`)

The ports are plain arrays indexed by core:

* `fetch_*` and `lsu_*`: request, squash and response;
* the memory port: `mem_req`, `mem_wb`, `mem_resp`;
* event strobes of every cache and tracker.

The memory port has no cancellation channel. An assertion checks that the L2
never tries to send one.

Parameters and their defaults:

| parameter | default | origin |
|---|---|---|
| NCORES | 4 | evaluated configurations use 1 and 4 cores |
| L1I_SIZE / L1I_WAYS / L1I_LAT | 32768 / 2 / 1 | evaluation configuration |
| L1D_SIZE / L1D_WAYS / L1D_LAT | 65536 / 2 / 2 | evaluation configuration |
| L2_SIZE_CORE / L2_WAYS / L2_LAT | 2 MB / 8 / 20 | evaluation configuration |
| L1_NMSHR, L2_NMSHR | 4, 16 | own choice |
| NTGT (targets per MSHR) | 4 | own choice |
| TRK_NENT (tracker entries) | 8 | own choice |

The case-study configurations of the original work can also be set through
these parameters:

* **C1:** 2 cores; 32 kB L1s, 8-way; 512 kB L2, 16-way; latencies 4/4/14.
  Set `L2_SIZE_CORE=262144`.
* **C2:** the same sizes, with latencies 80/80/80.

Synthesis of the default build with yosys gives about 8.7k cells and 780
flip-flops outside the memories. The memories hold about 72 Mbit, mostly the
8 MB L2 data array.

## Where this RTL departs from the original work

The original work evaluated CacheSquash in a cycle-level simulator with
out-of-order cores. What could not be carried over into RTL:

* **The core is not included.** An out-of-order core with its load-store
  unit is outside the design. The tracker stands in for the part of the
  LSU that issues cancellations.
* **No coherence protocol.** The original hierarchy used a snooping
  protocol and forwarded cancellations to caches that a coherence request
  had made allocate MSHRs ("cancellation snooping"). Here the L1s are
  private, there is no coherence traffic, and that path does not exist.
  Upgrade misses (a valid line without write permission) do not exist
  either.
* **No TLB.** Cancelling page-table walks for squashed translations is not
  built.
* **Main memory is outside the design.** The testbenches use a simple
  fixed-latency model (100 cycles by default).
* **Details the original work leaves open, chosen here:**
  * MSHR and target counts;
  * replacement policy;
  * write-back queue;
  * store handling (read for a store miss, merge at fill);
  * pipeline and priority order;
  * one cancellation per cycle per tracker;
  * withdrawing a miss request that has not left the cache yet;
  * 32-bit physical addresses;
  * 64-bit core words;
  * synchronous active-low reset;
  * an L2 with a single bank.
* **Core frequency** (3 GHz) and DRAM timing are not modelled.
* **Broadcasting cancellations** to all caches at once is not built. The
  original work only suggests it as a possible extension.

## Testbenches

Each testbench is self-checking and ends by printing
`TB_RESULT checks=N failures=M`. Each has a watchdog.

| testbench | what it checks |
|---|---|
| `tb/tb_mshr_file.sv` | allocate and coalesce; MatchMSHR; removal from the middle of a target list (order kept); freeing on the last removal; CheckMSHR after a cancellation and after reuse for another block; fill and draining; exhaustion |
| `tb/tb_cs_cache.sv` | an L1-style and an LLC-style instance, LAT=3; exact hit latency; the best case (cancellation forwarded, late response dropped, next access misses again); a coalesced miss with one target cancelled; a cancellation without an MSHR; withdrawing an unsent miss; MSHR stall; store, eviction and write-back data; LLC not forwarding |
| `tb/tb_spec_req_tracker.sv` | ids and word selection; cancellations for exactly the younger squashed loads; late responses dropped; a response that beats its cancellation; a squash in the issue cycle; back-pressure |
| `tb/tb_l2_xbar.sv` | round-robin order; source byte in ids; request and cancellation in the same cycle; back-pressure; response routing |
| `tb/tb_cachesquash_top.sv` | 2 cores with small caches and default latencies; see below |
| `tb/tb_cachesquash_full.sv` | the top at its default parameters (4 cores, 8 MB L2); see below |
| `tb/tb_cachesquash_cases.sv` | the case-study configurations C1 and C2; see below |

`tb/mem_model.sv` is the behavioural memory: in order, fixed latency, a
computed pattern for blocks that were never written.

### End-to-end test (`tb_cachesquash_top`)

The end-to-end test plays three Spectre-like transmit loads on core 0 and
measures the reload time:

* **Best case:** a squash 3 cycles after issue. The reload takes 127 cycles,
  a full miss.
* **Intermediate case:** the squash delay is searched until it is found. At
  a delay of 120 cycles the reload hits in the L2 (24 cycles).
* **Worst case:** the squash comes after the data. The reload takes 2
  cycles, an L1 hit.

It then runs two directed steps:

* both cores miss on one block, so the L2 coalesces the two misses;
* a squashed miss is withdrawn from its L1 while the L2 is full.

Finally, both sides of both cores run random loads, stores and fetches with
random squashes. Every load is checked against a reference memory. Every
event kind is counted, and one that never happened is a failure.

### Full-size test (`tb_cachesquash_full`)

The full-size test runs with 4 cores and an 8 MB L2. It checks the 16384-cycle
tag sweep. Then each core does:

* a miss;
* an L1D hit in exactly 2 cycles;
* an L1I miss;
* an L1I hit in exactly 1 cycle;
* a best-case squashed load.

Core 0 also stores and reads back.

### Case-study test (`tb_cachesquash_cases`)

This test runs the C1 and C2 configurations side by side, 2 cores each.
Memory answers in 150 cycles for C1 (about 50 ns at 3 GHz) and in 5 cycles
for C2 (0.1 GHz). Both memory latencies are estimates.

An experiment is 32 transmit loads. Each goes to a block never touched
before and is squashed W cycles after issue. Right after, a reload of the
same block shows which levels the squashed load changed. The test computes
the cache-change metric for two levels:

    CC = (2*N1 + N2) / (3 * Ntotal)

Here N1 and N2 count the attacks that changed L1 and L2.

| configuration, window | N1 | N2 | CC |
|---|---|---|---|
| C1, W = 10 | 0 | 0 | 0 |
| C2, W = 10 | 0 | 32 | 0.333 |
| C1, W longer than a memory access | 32 | 32 | 1 |

C2 reproduces the original result qualitatively: memory is so fast that
the L2 is always filled before its cancellation arrives, while the L1 is
protected. In the original results for that experiment, 15 of 32 attacks
changed the L2, and the reported CC of 0.234 equals 15/64. The formula above
gives 0.156 for those counts. This test follows the formula.

### Running a test

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_cachesquash_top \
    rtl/cs_pkg.sv rtl/mshr_file.sv rtl/cs_cache.sv rtl/spec_req_tracker.sv \
    rtl/l2_xbar.sv rtl/cachesquash_top.sv tb/mem_model.sv tb/tb_cachesquash_top.sv
./obj_dir/Vtb_cachesquash_top
```

Use the matching testbench and the files it needs for the other tests. The
block tests need only `cs_pkg.sv` and the block's own files. The full-size
test builds in under a minute and runs in seconds.
