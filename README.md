# Neat: cache coherence without a directory, for data-race-free programs

Most multicore caches keep coherence with a directory. The directory tracks which cores hold
each line, invalidates sharers on a write, and forwards requests between private caches. That
machinery is large, it is hard to verify, and it does work that data-race-free programs never
need. In such a program, one core can only observe another core's write after a
synchronization pair: the writer **releases** (unlock, barrier arrival) and the reader
**acquires** (lock, barrier departure).

Neat uses that rule. A private cache does two things:

* **At a release**, it writes back every byte it has dirtied since its last release. Other cores
  can then find those bytes in the shared last-level cache (LLC).
* **At an acquire**, it drops the copies that may have gone stale, so that later reads fetch
  fresh data from the LLC.

In between, loads and stores run locally with no coherence traffic. The LLC has no directory,
no sharer lists and no owners. Every message goes between one private cache and the LLC, never
from one core to another.

Two details keep this cheap:

1. **Per-byte write bits.** Each cached byte has a write bit. A write-back carries only the
   written bytes and their mask, and the LLC merges by that mask. Two cores may write different
   bytes of one line (false sharing) without ping-pong and without losing either write.
2. **Write signatures and the PI state.** Dropping the whole cache at every acquire would be
   wasteful. Instead the LLC keeps one Bloom filter per core (1008 bits). It records every line
   that *other* cores have written back since that core last asked. At an acquire, a private
   cache fetches its signature and marks only the lines that hit in the filter as **partially
   invalid (PI)**. A PI line keeps the core's own dirty bytes, because those are the newest
   values. Its clean bytes are treated as stale.

This repository is a synthesizable SystemVerilog model of that hierarchy:
* 32 private caches, each with its Neat controller.
* An interconnect.
* A shared LLC with the per-core write signatures and write-back counters.

It also holds self-checking testbenches for every block and for the whole system.

## Line states and what each access does

A private-cache line is in one of three states. It also carries 64 write bits, one per byte.

| state | meaning | load | store |
|---|---|---|---|
| I  | not present | miss: GetLine | miss: GetLine, then write |
| V  | valid | hit | hit, set write bits |
| PI | partially invalid: only the dirty bytes are trusted | hit if every byte read is dirty; otherwise GetLine, merge the fetched line *under* the dirty bytes, and go to V | hit, set write bits |

Evictions:

* **Clean line** (no write bits set): dropped silently. The LLC is not told.
* **Dirty line**: sends a write-back of its dirty bytes with **CNT = 1**. The LLC answers it
  with **PutAck**. Until that PutAck arrives, the write-back sits in a small **request buffer**.
  A later miss to the same line waits until the line has left the buffer, so the reload cannot
  overtake the write-back.

In this design the GetLine for the new line goes out first and the victim's write-back right
after it. The reload of the new line therefore does not wait behind the write-back.

## The core-wide states: NE, SI and CM

The controller of each private cache is in one of three states:

* **NE**: normal execution.
* **SI**: self-invalidation, during an acquire.
* **CM**: commit, during a release.

**Release (NE → CM → NE).**
1. The controller walks every line, one per cycle.
2. For each line with write bits set, it sends a write-back with **CNT = 0**, then clears the
   line's write bits. The line stays valid.
3. When the walk ends, it sends one data-less message that carries the number of write-backs it
   just sent.
4. The LLC counts CNT = 0 write-backs per core in a **wbReceived** counter. When the counter
   equals the announced number, the LLC sends **PutAllAck** and resets the counter.
5. The release completes once PutAllAck has arrived and the request buffer is empty. At that
   point every byte the core wrote before the release is in the LLC.

**Acquire (NE → SI → NE).**
1. The controller sends **GetWrSig**. The LLC replies with the core's signature and clears it
   in the same step.
2. The controller walks every line. A V line whose address tests positive in the signature
   becomes PI. Every other line is kept.
3. Write bits are not touched: the core's own unreleased writes stay dirty and stay visible to
   it.
4. The controller then sends the closing count (0 write-backs) and waits, as for a release, for
   PutAllAck and an empty request buffer.

Because the LLC adds a written-back line to the signature of *every other* core at the moment
it merges the bytes, a core that acquires after a release sees every line that the release
wrote. The filter can raise false positives, which cost a refetch. It never gives false
negatives.

**Why the count exists.** The protocol allows the interconnect to reorder messages. The closing
count lets the LLC decide when all of a core's bulk write-backs have landed without tracking
them one by one. If the count arrives before some of the write-backs, the LLC stores the
expected number and sends PutAllAck when the last write-back is merged. The LLC handles that
case, and its unit test exercises it. The interconnect built here delivers each core's messages
in order, so in the assembled system the count always arrives last.

## The LLC

The LLC serves one message at a time:

| message in | action | reply |
|---|---|---|
| GetLine | read the line (from memory on a miss) | Data |
| write-back, CNT = 1 | merge the bytes under the write bits, mark dirty, insert the line into the other cores' signatures | PutAck |
| write-back, CNT = 0 | same merge and insert; increment the writer's wbReceived | PutAllAck if a count is already waiting and is now met |
| closing count | compare with wbReceived | PutAllAck now, or once the rest arrive |
| GetWrSig | return the core's signature and clear it | signature |

The array is set-associative, with 64-byte lines and a valid and a dirty bit per way. Main
memory sits behind a one-request-at-a-time port:
* A miss first writes a dirty victim to memory, then reads the line.
* A write-back that misses also reads the line first, since it carries only some bytes.

The victim is an invalid way if one exists, otherwise the way a free-running counter points at.
After reset the controller clears the valid bits, one set per cycle. For the 64 MB default that
takes 32,768 cycles. Requests wait until the sweep ends, which `init_done_o` signals.

**Latency.** Every reply goes through a delay queue. It leaves 50 cycles after its request was
accepted (the LLC hit latency), or 50 cycles after the line came back from memory on a miss. A
hit occupies the controller for 3 cycles, so the LLC can accept a request about every 3 cycles
while earlier replies wait out their latency in the queue.

**Write signatures.** There is one 1008-bit signature per core. The two Bloom hashes of a line
address `a` (26 bits) are:
* `h0 = a mod 1008`
* `h1 = (reverse26(a) xor (a >> 7) xor (a << 3) mod 2^26) mod 1008`

A line is "possibly written" when both bits are set.

## Interconnect

Each private cache has one request channel to the LLC and one response channel back, all
valid/ready.
* **Requests:** a round-robin arbiter passes one core's request per cycle to the LLC. It holds
  the grant while the LLC is not ready, so the payload the LLC sees stays stable.
* **Responses:** each LLC response goes to the core named in its `dst` field.

The interconnect adds no cycles and moves one message of up to a full line per cycle. At
1.6 GHz that is about 100 GB/s. The 16-byte flit serialization of a real network is not
modelled.

## Module map

| file | what it is |
|---|---|
| `rtl/neat_pkg.sv` | types, message formats, line states, signature hashes |
| `rtl/neat_l1.sv` | private cache with its Neat controller (NE/SI/CM, I/V/PI, write bits) |
| `rtl/neat_reqbuf.sv` | request buffer of outstanding eviction write-backs |
| `rtl/neat_noc.sv` | cores ↔ LLC interconnect |
| `rtl/neat_llc.sv` | shared LLC with the Neat LLC controller |
| `rtl/neat_wrsig.sv` | per-core write signatures (Bloom filters) |
| `rtl/neat_rsp_delay.sv` | reply queue that gives the LLC its latency |
| `rtl/neat_top.sv` | the whole hierarchy: NCORES private caches, interconnect, LLC |
| `tb/neat_mem_model.sv` | behavioural main memory (120-cycle reads), simulation only |

**Top-level interface** (`neat_top`):
* **Per core c:**
  * `core_req_valid_i[c]` / `core_req_ready_o[c]` / `core_req_i[c]`: a request, which is one of:
    * a load of an 8-byte word with byte enables;
    * a store of an 8-byte word with byte enables;
    * an acquire;
    * a release.
  * `core_rsp_valid_o[c]`: pulses once when the request completes.
  * `core_rsp_rdata_o[c]`: the load data.
  * `core_state_o[c]`: the controller's state (NE/SI/CM).
* **Memory:** the `mem_*` port goes to main memory.
* **Events:** the `ev_*` outputs pulse on each protocol event. Testbenches and performance
  monitors count them:
  * V→PI at an acquire, and line kept at an acquire;
  * PI merge, and PI hit;
  * dirty eviction, and clean eviction;
  * GetLine stalled on the request buffer;
  * commit write-back;
  * LLC hit, LLC miss, PutAllAck, and early count.

**Timing.** All logic uses one clock (`clk`) and a synchronous active-low reset (`rst_n`).
* A private-cache hit answers 4 cycles after the request is accepted.
* A miss that hits in the LLC takes a few cycles plus the 50-cycle LLC latency.
* A miss that also misses in the LLC adds the 120-cycle memory read.
* An acquire or release walks the whole private cache, 512 lines at one line per cycle.
  * A release also waits for each write-back to be accepted and for the PutAllAck.
  * At full size, a release of one dirty line takes about 560 cycles, and an acquire about 610.

## Sizes

The defaults are the evaluated configuration:
* 32 cores.
* 32 KB, 8-way private caches with 64-byte lines and a 4-cycle hit.
* A 64 MB, 32-way LLC with a 50-cycle hit.
* 1008-bit write signatures.
* A 120-cycle memory model.

The request buffer has 8 entries. The CNT field is 16 bits wide. Addresses are 32-bit byte
addresses.

Every size is a parameter. `neat_l1`: `SIZE_BYTES`, `WAYS`, `HIT_LATENCY`, `RB_ENTRIES`.
`neat_llc`: `SIZE_BYTES`, `WAYS`, `LATENCY`. `neat_top` passes them through as `L1_*`, `LLC_*`
and `NCORES`.

The LLC and private-cache arrays are written as plain arrays that synthesis keeps as memories.
At the full 64 MB a synthesis run is slow: the LLC alone holds half a gigabit of data. It
completes in seconds at reduced sizes.

## Where this model departs from the described design

* **One private level.** The evaluated system has a private L2 (256 KB, 8-way) under each L1.
  How write bits, PI state and the walks span two private levels is not specified, so each core
  here has a single private cache.
* **Blocking private cache.** One miss at a time. The request buffer holds only eviction
  write-backs; the GetLine in flight is tracked by the controller's state machine.
* **Waiting rule at the end of SI and CM.** The description is inconsistent about whether SI or
  CM must wait for outstanding eviction PutAcks. This design waits for PutAllAck and an empty
  request buffer in both. That is safe under either reading.
* **Closing count.** The data-less write-back that carries the count is its own message type.
  A count of 0 or 1 therefore cannot be mistaken for an eviction write-back.
* **Walk speed.** The SI and CM walks visit one line per cycle. Their cost is set by that, not
  by a bandwidth model.
* **Ordered interconnect.** Each core's messages stay in order, and no flit-level
  serialization is modelled. The LLC still accepts a closing count that overtakes its
  write-backs.
* **Whole signatures.** A signature is returned whole, as one 1008-bit reply. Compressing
  sparsely populated signatures is mentioned in the description, but its encoding is not given.
* **Own choices.** The LLC organisation, victim choice, memory port, the two signature hashes,
  the 8-byte core access granule and round-robin replacement in the private cache are all this
  design's own choices.
* **Not built:** the cores (the top exposes their request ports), the private L2 and main
  memory (a behavioural model is used in simulation).

## Testbenches

Every testbench prints `TB_RESULT checks=N failures=M` and stops. Each has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_neat_reqbuf` | allocate/free/lookup against a model, including lookups of freed entries; full and empty flags |
| `tb_neat_wrsig` | inserts reach every core except the writer; clear-on-read; results against independently coded hashes |
| `tb_neat_noc` | random traffic from 4 cores with random back-pressure: per-core order, no starvation, response routing |
| `tb_neat_llc` | see below |
| `tb_neat_l1` | see below |
| `tb_neat_top` | see below |
| `tb_neat_top_full` | the default-size system (32 cores, 64 MB LLC), see below |

`tb_neat_llc` checks:
* the exact 50-cycle hit latency, and miss latency of at least 50 + 120 cycles;
* eviction write-back merged by write bits, answered by PutAck;
* signature insert and clear;
* a bulk commit closed by one PutAllAck, a count that arrives early, and an empty commit;
* LLC victim write-back to memory and refetch;
* byte-exact contents.

`tb_neat_l1` plays the LLC itself and checks:
* the exact 4-cycle hit latency;
* hits and misses, with write bits carried on write-backs;
* V→PI at an acquire, the PI load hit and the PI merge;
* silent clean eviction, and a dirty eviction with CNT = 1;
* a miss held until the PutAck of its line;
* a release that waits for an outstanding PutAck.

`tb_neat_top` runs 4 cores with small caches over a shared region. It is a data-race-free
program in rounds:
* **Write phase:** each core writes only the bytes it owns that round, which makes heavy false
  sharing. It checks its own bytes as it goes, then releases.
* **Read phase:** after a barrier and an acquire, each core checks whole words against a
  byte-level reference memory.

A directed sequence on one cache set, which random accesses avoid, makes a line turn PI at
every acquire. The core then stores to that line, reads its own bytes back and reads the whole
word, so the PI hit and the PI merge occur every round.

It counts every mechanism and fails if one never occurs. The only exception is the early count,
which the ordered interconnect cannot produce. It also checks the 4-cycle hit latency.

`tb_neat_top_full` runs the default-size system:
1. It waits for the 32,768-cycle LLC sweep.
2. It checks a miss to memory and a 4-cycle hit.
3. A store on one core, then a release.
4. An acquire on a second core, which turns its stale copy PI.
5. A merged reload that returns the new bytes.
6. A third core reading the line from the LLC.

To run one, for example the end-to-end test:

```
verilator --binary --timing --assert -Irtl rtl/neat_pkg.sv rtl/neat_reqbuf.sv rtl/neat_l1.sv \
  rtl/neat_wrsig.sv rtl/neat_rsp_delay.sv rtl/neat_llc.sv rtl/neat_noc.sv rtl/neat_top.sv \
  tb/neat_mem_model.sv tb/tb_neat_top.sv --top-module tb_neat_top -Mdir obj -o sim
./obj/sim
```

The full-size testbench builds the same way with `tb/tb_neat_top_full.sv`. It takes under a
minute to compile and about a second to run.

Testbench-side note: verilator shares the arguments of a task that is called from several
processes forked at once. The end-to-end testbench therefore gives each core's driver its own
copy of the tasks, inside a generate loop.
