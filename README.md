# MAC: a write-aware replacement policy for a last-level cache in front of PCM

Phase-change memory (PCM) is dense and non-volatile, but each cell survives only
about 10^8 to 10^9 writes, and a write costs far more time and energy than a
read. When PCM is the main memory, every write it receives is a dirty line
evicted from the last-level cache. A replacement policy that keeps dirty lines
in the cache longer, without giving up much hit rate, therefore reduces PCM
wear and write traffic directly.

MAC ("Multilayer Ark for Cache") does this by giving every line one of four
protection levels and protecting dirty lines at **every** stage of a line's
life: when it is inserted, when it is hit, when it ages (demotion), and when a
victim is chosen. The key property is that a dirty line, however long it sits
idle, can only drop to level 3, never to level 4 where clean lines go; so no
dirty line is evicted while any clean, stale line remains in its set.

This repository holds synthesizable SystemVerilog for the policy and for a
shared, 8-bank, 512 KB, 16-way write-back L2 cache built around it, plus
self-checking testbenches.

## 1. Protection levels (FDL)

Each line carries two small attributes:

* **FL, freshness level**: 1 if the line has been hit since it was inserted or
  last demoted, 2 otherwise.
* **DL, dirty level**: 1 if the line is dirty, 2 if clean.

They combine into the **FDL** (fresh-dirty level), 1 = safest, 4 = evicted first:

| FDL | FL | DL | meaning        | 2-bit code (`fdl_e`) |
|-----|----|----|----------------|----------------------|
| 1   | 1  | 1  | fresh, dirty   | `FDL1` = 0           |
| 2   | 1  | 2  | fresh, clean   | `FDL2` = 1           |
| 3   | 2  | 1  | stale, dirty   | `FDL3` = 2           |
| 4   | 2  | 2  | stale, clean   | `FDL4` = 3           |

Freshness ranks above dirtiness (a fresh clean line outranks a stale dirty
one), which keeps the hit rate close to LRU. Dirty lines live only in levels
1 and 3, clean lines only in 2 and 4; a line moves between the two groups only
when it becomes dirty. The code stores FDL-1, so bit 1 is FL-1 and bit 0 is
DL-1.

Besides the FDLs, each set keeps a **global LRU chain**: a 4-bit position per
way, 0 = most recently used (MRU), 15 = least (LRU). The positions of a set
are always a permutation of 0..15. From the chain plus the FDLs one gets, for
each level, its own LRU line; the set stores these as four 4-bit **level-LRU
registers**. Storage per 16-way set: 16 x 6 bits plus 4 x 4 bits.

## 2. The three rules

**Insertion.** A new line always starts stale (FL 2), so a line used once does
not push out reused lines. A read miss inserts it clean (FDL 4), a write miss
dirty (FDL 3). It becomes the MRU line of the chain.

**Promotion.** A hit makes the line fresh and MRU. A write hit, or any hit on
a dirty line, gives FDL 1; a read hit on a clean line gives FDL 2:

| before     | 1 | 2 | 3 | 4 |
|------------|---|---|---|---|
| read hit   | 1 | 2 | 1 | 2 |
| write hit  | 1 | 1 | 1 | 1 |

("Read" is an L1 load/store miss fetching a line; "write" is an L1 write-back
of a line.)

**Victim selection with demotion.** On a miss in a full set:

| step | condition                       | victim          | demotions (each demoted line is also moved to MRU) |
|------|---------------------------------|-----------------|-----------------------------------------------------|
| a    | some line is level 4            | LRU of level 4  | none                                                |
| b    | else some line is level 3       | LRU of level 3  | LRU of level 2 -> 4, then LRU of level 1 -> 3       |
| c    | else some line is level 2       | LRU of level 2  | LRU of level 1 -> 3                                 |
| d    | else (all lines level 1)        | LRU of level 1  | none                                                |

Demotion is the ageing step. It happens only when the pool of lines that may
be evicted first runs out, and only one line per fresh level ages per miss.
A fresh clean line ages to level 4, a fresh dirty line to level 3: a dirty
line keeps its place ahead of every clean line. After the demotions, the new
line is inserted at MRU. The final chain order at the MRU end after a step-b
miss is therefore: new line, demoted level-1 line, demoted level-2 line.

Example, full set, no level-4 line, some level-3 lines: the oldest level-3
(dirty, stale) line is evicted and written back to PCM; the oldest fresh
clean line becomes level 4, so the next miss will probably evict a clean line
and write nothing.

## 3. How the policy is built

* `mac_victim_select` (combinational) works out which levels are occupied
  from the FDLs and valid bits, then applies steps a-d to the four level-LRU
  registers. It outputs the victim way, the step taken and the two demotion
  requests with their ways.
* `mac_set_update` (combinational) produces the whole next state of a set for
  one access. Moving way *w* to MRU sets its position to 0 and adds one to
  every position smaller than *w*'s old one. A miss chains up to three such
  moves (demoted level 2, demoted level 1, new line); a hit needs one. The
  four level-LRU registers are then recomputed from the new positions and
  FDLs: register *k* becomes the valid way of level *k* with the largest
  position.
* `mac_state_array` holds the 112-bit state of each set in flip-flops, so
  that reset can set every chain to way *w* at position *w* in one cycle.

Before a set is full, a miss fills the lowest-numbered empty way and demotes
nothing. An empty level's register keeps way 0 and is never used, since
occupancy is derived from the FDLs.

## 4. The cache around it

`mac_l2_cache` is an L2 shared by the L1 caches of all cores: 512 KB, 16
ways, 64-byte lines, write-back, 8 banks of 64 sets each, 15-cycle hit
latency, 33-bit byte addresses (8 GB of PCM). Address split, low to high:
6 offset bits, 3 bank bits, 6 set bits, 18 tag bits.

Each `l2_bank` serves one request at a time:

```
IDLE --req--> LOOKUP --hit--------------------------------------> RESP --resp taken--> IDLE
                 |--miss, victim dirty--> WB_REQ --+
                 |--miss, victim clean-------------+--read--> FILL_REQ -> FILL --+--> RESP
                                                   +--write-> INSTALL -----------+
```

* **LOOKUP** compares the 16 tags, runs `mac_set_update`, and writes the new
  replacement state and the tag entry in the same cycle. The dirty bit becomes
  old-dirty OR write on a hit, and write on a miss. It also starts a data read
  (a read hit, or the victim's line for a write-back) or a data write (a
  write hit).
* **WB_REQ** offers the dirty victim's line to PCM. This is the traffic MAC
  reduces.
* **FILL_REQ / FILL** fetch the missing line on a read miss. A write miss
  fetches nothing: a write-back carries a whole line, which **INSTALL** stores.
* **RESP** holds the response until it is taken. A hit is offered exactly 15
  cycles after its request was accepted; a miss as soon as it is complete,
  and never earlier than 15 cycles. At the top level, a response can wait
  longer when several banks finish together and share the response port.

The top sends each request to bank `addr[8:6]`, accepting it when that bank
is idle, so the eight banks work in parallel. A round-robin arbiter
(`rr_arbiter`) shares the response port among the banks. Another shares the
PCM port. A grant is held until it is taken, so a request never changes while
it waits. PCM requests carry the bank number as an id, and read data must
come back with that id.

Two assertions in `l2_bank` check the central guarantee. On a miss in a
full set that still holds a level-4 line, the victim is clean, so nothing is
written to PCM. A step-b eviction, by contrast, always writes back a dirty
line.

Dirty information is kept twice on purpose: as the tag array's dirty bit (the
ordinary write-back cache) and as the DL bit of the FDL. An assertion in
`l2_bank` checks that the two always agree for valid lines. Other assertions
check that a PCM request or a response is held stable until accepted.

### Interfaces of `mac_l2_cache`

| group      | signals                                                                                  | notes |
|------------|------------------------------------------------------------------------------------------|-------|
| request    | `req_valid`, `req_ready`, `req_kind` (`REQ_READ`/`REQ_WRITE`), `req_addr[32:0]`, `req_id[7:0]`, `req_wdata[511:0]` | taken when valid and ready are high at a clock edge |
| response   | `resp_valid`, `resp_ready`, `resp_kind`, `resp_id`, `resp_hit`, `resp_rdata[511:0]`        | out of order across banks; `resp_id` matches `req_id` |
| PCM        | `mem_req_valid`, `mem_req_ready`, `mem_req_write`, `mem_req_addr`, `mem_req_id[2:0]`, `mem_req_wdata`; `mem_resp_valid`, `mem_resp_id`, `mem_resp_rdata` | writes are victim write-backs; reads return with their id |
| events     | `miss_evt[7:0]`, `miss_step[7:0]`, `miss_demote_l2[7:0]`, `miss_demote_l1[7:0]`            | one pulse per miss, per bank |

Reset (`rst_n`) is asynchronous and active low. It clears all valid and dirty
bits and puts every LRU chain in way order.

## 5. What follows the policy definition, and what is this design's own

Taken from the policy definition and the evaluated configuration: the four
levels and their FL/DL mapping, the insertion, promotion and victim rules
(steps a-d with their demotions and MRU moves), the 4-bit chain positions,
the 2-bit FDLs and the four level-LRU registers per set. Also the cache size,
associativity, line size, bank count, write-back policy and 15-cycle hit
latency.

Choices made here, where the policy definition says nothing:

* Empty ways are filled first, with no demotion; the rules above only cover
  full sets.
* A demotion whose source level is empty is skipped.
* The level-LRU registers are recomputed at every update rather than
  maintained incrementally.
* In the original pseudo-code, the victim algorithm numbers the level-LRU
  registers from 0 (`LRU_0` is level 1). Its "change FDL to 3 / to 2" lines
  use those 0-based numbers and mean levels 4 and 3, as the prose
  description says. The RTL follows the prose.
* The FDL bit encoding, the address split, bank interleaving, the blocking
  bank controller and its state sequence. Also no fetch on a write miss,
  writing tag and replacement state in the lookup cycle, all handshakes,
  port sharing by round robin, and id-tagged PCM reads.
* The L1 caches, the crossbar between cores and L2, the memory controllers
  and the PCM device are outside this design. The request, response and PCM
  ports are where they connect.

## 6. Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops through a watchdog if it hangs.

* `tb_mac_victim_select`: 20,000 random sets against a literal rendering of
  steps a-d; every step must occur.
* `tb_mac_set_update`: one set through 20,000 random hits and misses, fed back
  each time. It is compared with a reference that keeps the chain as an
  ordered list of ways, checking positions, FDLs, valid bits, victim, step
  and all four level-LRU registers (about a million checks).
* `tb_mac_state_array`, `tb_l2_tag_array`, `tb_l2_data_array`: reset values
  and random write/read against shadow copies, including the one-cycle read
  latency of the data array.
* `tb_l2_bank`: one bank behind a PCM model. It checks the hit flag and data
  of every response, the exact 15-cycle hit latency, and the address and data
  of every PCM write-back against a reference MAC cache (`tb/mac_ref_pkg.sv`).
  Traffic phases make every victim step occur.
* `tb_mac_l2_cache`: the full cache at its default size with 6,000
  overlapping requests over all banks, out-of-order responses and random
  response back-pressure. It checks everything `tb_l2_bank` checks, per bank.
  It also counts each mechanism (hits, fills of empty ways, steps a-d, both
  demotions, PCM write-backs, banks busy in parallel, PCM port contention,
  back-pressure) and fails if any never happened.

* `tb_mac_write_traffic`: the write-traffic comparison the policy is meant
  to win, on a synthetic stream. In each of 16 sets, six lines are written
  back again and again and four are read again and again, between bursts of
  20 read-once lines. The stream is run through the cache and, in the
  testbench, through an LRU model of the same size. In this stream more than
  16 distinct lines pass through a set between two uses of a dirty line. LRU
  therefore evicts and writes back the dirty lines: 5,760 PCM writes, no
  hits. MAC evicts the read-once lines (inserted at level 4) and keeps the
  reused ones: 0 PCM writes, 5,664 hits. The testbench requires fewer writes
  and no fewer hits than LRU. It also checks every response against the
  reference MAC model.

`tb/pcm_model.sv` is a behavioural (non-synthesizable) PCM. It serves one
request at a time, with a read latency of 1024 cycles and a write latency of
4096 by default. `tb_mac_l2_cache` uses these latencies, which take about
4.4 million cycles (about 25 s of simulation). The other benches shorten them
to keep runs brief. All benches run the cache at its default parameters.

Not verified here: the write-traffic reductions reported for the policy on
full benchmark runs. Those need a full-system simulator and the benchmark
programs, not RTL simulation.

## 7. Simulating and changing it

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/mac_pkg.sv tb/mac_ref_pkg.sv rtl/mac_victim_select.sv rtl/mac_set_update.sv \
  rtl/mac_state_array.sv rtl/l2_tag_array.sv rtl/l2_data_array.sv rtl/l2_bank.sv \
  rtl/rr_arbiter.sv rtl/mac_l2_cache.sv tb/pcm_model.sv tb/tb_mac_l2_cache.sv \
  --top-module tb_mac_l2_cache -o sim
./obj_dir/sim
```

For another testbench, list `rtl/mac_pkg.sv`, `tb/mac_ref_pkg.sv` (for the
bank and cache benches), the modules it uses and the testbench. Each run
takes a few seconds.

Sizes live in `rtl/mac_pkg.sv`. `WAYS` sets the associativity: chain
positions and level-LRU registers widen with `$clog2(WAYS)`. `CACHE_BYTES`,
`BANKS` and `LINE_BYTES` set the geometry, and `HIT_LATENCY` the hit
timing. The policy itself is all in `mac_set_update`, `mac_victim_select` and
the `fdl_insert` / `fdl_promote` functions of the package. A variant with
more freshness or dirtiness levels would widen `fdl_e` and change those three
places.
