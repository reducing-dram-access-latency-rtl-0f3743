# ChargeCache: a DDR3 memory controller that remembers highly-charged rows

A DRAM cell loses charge over time, and the refresh interval is sized for the
worst case: a row that was last written back 64 ms ago. Standard activation
timings, tRCD (activate to column command) and tRAS (activate to precharge),
are set for such a nearly-drained row. A row that was closed only a moment ago
is different. Closing a row writes its full charge back into the cells, and for
about a millisecond afterwards the bitlines swing faster when the row is
opened. A precharged row is therefore "highly charged" for a short while and
can be activated with shorter timings.

Programs open the same rows again soon after they close them. Two cores
competing for one bank keep closing each other's rows, and one core that walks
over a few rows does the same. ChargeCache exploits this. The memory controller
keeps a small table of the rows it has precharged recently. When it activates
a row that is in the table, it uses tRCD = 7 and tRAS = 20 bus cycles instead
of 11 and 28 (DDR3-1600, 1.25 ns per cycle). The DRAM chips are unchanged. Only
the controller's timing bookkeeping differs. An entry must never outlive the
period in which its row is still highly charged, so a cheap sweep clears the
table slot by slot.

This repository holds synthesizable SystemVerilog for a complete two-channel
DDR3 controller built around that idea. It also has self-checking testbenches
and a behavioural DDR3 channel model that checks every command the controller
issues against the timing rules, including the rule for when lowered timings
are allowed.

## Structure

```
chargecache_system                 two channels, address split, response merge
└─ mem_controller  (x2)            one DDR3 channel
   ├─ request_buffer               64-entry age-ordered request queue
   ├─ frfcfs_scheduler             picks one command per cycle
   │  └─ command_generator (x64)   next command of each buffered request
   ├─ bank_row_state               open row (and opening core) per bank
   ├─ bank_timing (x8)             per-bank timing counters, two timing sets
   ├─ chargecache                  ChargeCache of the channel
   │  ├─ hcrac (x8, one per core)  highly-charged row address cache
   │  └─ cc_inval_counters         IIC/EC invalidation sweep
   ├─ refresh_ctrl                 tREFI timer
   ├─ ddr3_cmd_encoder             command -> CS#/RAS#/CAS#/WE#/BA/A
   └─ sync_fifo (x2)               reads in flight; response buffer
cc_pkg                             shared constants, timings, structs
```

## The highly-charged row address cache (HCRAC)

The HCRAC is a tag-only cache. It stores no data, only the addresses of rows.
There is one rank per channel, so an entry holds the bank (3 bits), the row
(16 bits) and a valid bit. With 2 ways there is also 1 LRU bit, 21 bits in all.
The default size is 128 entries, organised as 64 sets of 2 ways.

* **Set index.** The low 6 row bits XORed with the bank number. The XOR spreads
  the same row number in different banks over different sets.
* **Insert** (a row was precharged). If the address is already present, only
  its LRU position changes. Otherwise an invalid way is filled, and failing that
  the least recently used way is replaced.
* **Lookup** (a row is about to be activated). The hit test is combinational,
  so the result is known in the cycle the ACT is chosen. A hit makes the way
  most recently used at the next edge.
* **Invalidate.** Clears the valid bit of one entry, addressed as {set, way}.
  If an insert writes the same entry in the same cycle, the insert wins. The
  row was just precharged, so keeping it is safe.

There is one HCRAC per core in every channel. A closed row is inserted into
the cache of the core whose request opened it. An ACT looks up the cache of the
core whose request it serves. A row that core A closed and core B reopens
therefore misses. This is a cost of private caches; the unit testbench checks
it on purpose.

Storage per the entry-size rule (rank bits + bank bits + row bits + valid)
plus LRU bits: 128 x 21 bits = 336 bytes per core per channel. That is
672 bytes per core with two channels, and 5376 bytes for 8 cores and 2 channels.
The default build has exactly this many bits.

## Forgetting rows in time: the IIC/EC sweep

An entry is useful only while its row is still highly charged. That time is the
*caching duration* C, 1 ms = 800,000 bus cycles. Per-entry timestamps would
cost a counter per entry. Instead two counters sweep the cache:

* the **Invalidation Interval Counter** (IIC) counts 0 .. C/k - 1, where k is
  the number of entries (6250 cycles for k = 128);
* when it wraps, the entry pointed to by the **Entry Counter** (EC) is
  invalidated and EC advances, wrapping from k - 1 to 0.

Every slot is therefore cleared exactly once every k x C/k = C cycles, at a
fixed phase. An entry written into slot s at time t is gone before t + C. It
may be cleared much earlier, if the sweep reaches s soon after the insert. Such
early eviction costs only hit rate, never correctness. One IIC/EC pair drives
the same index into all HCRACs of a channel; they have the same shape, so one
sweep serves them all.

The guarantee is counted from the *insertion*. Rows closed by one
precharge-all enter the cache one per cycle, so the last can be up to 8 cycles
late. The command register delays the pins by one more cycle. An entry may
therefore outlive its row's precharge by C plus a few cycles, about 0.001 % of
1 ms.

C must be a multiple of k for the period to be exact. With the defaults it is:
800,000 / 128 = 6250.

## Where ChargeCache meets the command stream

All of it happens in the controller's single clock domain, the 800 MHz DRAM
bus clock.

1. **Precharge.** The scheduler chooses a PRE (one bank) or a PREA (all
   banks). `bank_row_state` turns the command into a mask of the banks it
   closes, combinationally, together with each bank's open row and opening
   core. `chargecache` latches these into a per-bank pending register in that
   cycle. From the next cycle on it inserts one pending row per cycle, lowest
   bank first. The latest insertion lands 8 cycles after the precharge. The
   bank cannot be activated again until tRP = 11 cycles have passed, so the row
   is always in the cache before it could be reopened.
2. **Activate.** In the cycle the scheduler chooses an ACT, the row is looked
   up in the HCRAC of the requesting core. The result, `act_fast`, is given to
   that bank's `bank_timing` in the same cycle. At the clock edge the bank's
   counters are loaded:

   | on ACT   | column commands allowed after | precharge allowed after |
   |----------|-------------------------------|-------------------------|
   | miss     | tRCD = 11 cycles              | tRAS = 28 cycles        |
   | hit      | tRCD - 4 = 7 cycles           | tRAS - 8 = 20 cycles    |

   The lowered values apply to that activation only. The next ACT of the bank
   looks the row up again.
3. **Sweep.** The sweep runs freely, independent of traffic.

Each timing counter loads N - 1 when a command imposes an N-cycle delay, and
only ever rises (max with its current value). A command chosen in cycle t that
requires N cycles therefore allows the next one in cycle t + N.

## The channel controller around it

**Request buffer.** A 64-entry collapsing queue that holds reads and writes
together. Entry 0 is always the oldest, so the index is the age. A request
leaves when its RD or WR is issued, and the entries behind it move up one place.

**Command generation.** Every buffered request has its own small combinational
`command_generator`. It says which command the request needs next (RD/WR on an
open matching row, PRE on a different open row, ACT on a closed bank) and
whether the bank's timing and the data-bus turnaround allow it now.

**FR-FCFS scheduling**, one command per cycle, in this priority order:

1. *Refresh.* While a refresh is due, nothing new is started. When every open
   bank may be precharged, a PREA closes them all. When every bank may be
   activated, a REF is sent. The PREA is an ordinary precharge for ChargeCache,
   so all rows it closes are inserted.
2. *First ready.* The oldest request whose RD/WR can issue now. A RD also needs
   room for its data in the response path. If there is none, it waits and the
   channel reports a read stall.
3. *First come, first served.* The oldest request whose ACT or PRE can issue.
   A PRE for a conflict is held back while any buffered request still hits the
   row open in that bank.
4. *Closed-row policy only.* If nothing else is ready, precharge an open bank
   that has no buffered hit left.

With `closed_row = 0` (open-row policy) a row stays open until a conflicting
request needs the bank. With `closed_row = 1` rows are closed as soon as their
hits are served. The policy is an input pin rather than a parameter, so one
build can run either. The intended setting is open-row for single-core and
closed-row for multi-core systems. The closed-row policy makes many more
precharges and so feeds ChargeCache more.

**Data-bus turnaround.** Two small counters keep RD-RD and WR-WR commands
tCCD = 4 apart. They keep RD->WR 9 apart (tCL + tCCD + 2 - tCWL) and WR->RD
18 apart (tCWL + tBL + tWTR).

**DRAM side.** The chosen command goes through `ddr3_cmd_encoder` and one
register, so it appears on `ddr_pins` in the cycle after it was chosen.

| command | CS# RAS# CAS# WE# | address |
|---|---|---|
| ACT  | 0 0 1 1 | row on A |
| RD   | 0 1 0 1 | column x 8 on A[9:0], A10 = 0 (no auto-precharge), A12 = 1 (BL8) |
| WR   | 0 1 0 0 | as RD |
| PRE  | 0 0 1 0 | A10 = 0, bank on BA |
| PREA | 0 0 1 0 | A10 = 1 |
| REF  | 0 0 0 1 | |
| NOP  | 0 1 1 1 | |

The 64-byte write line is driven on `ddr_wdata` with `ddr_wvalid` in the same
cycle as its WR pins. Read lines return on `ddr_rdata` with `ddr_rvalid`, in
the order of the RD commands and at any later time. Splitting a line into DDR
bursts and aligning data by tCWL or tCL is left to a PHY, which is not part of
this design. A FIFO of {core, tag} per read in flight labels the returning
data. The response buffer (32 entries) then hands it to the cache side over
valid/ready. A RD is only issued while reads in flight plus buffered responses
are fewer than 32, so returning data is never dropped.

**Refresh.** `refresh_ctrl` raises a request every tREFI = 6240 cycles
(7.8 us) and holds it until the REF is issued.

## Two channels

`chargecache_system` splits a 27-bit cache-line address, from the bottom up:

| bits   | field   | width |
|--------|---------|-------|
| 0      | channel | 1 |
| 7:1    | column (line within the 8 KB row) | 7 |
| 10:8   | bank    | 3 |
| 26:11  | row     | 16 |

`req_ready` is the ready signal of the addressed channel. Read responses of
the two channels are merged onto one port by a round-robin arbiter. Each
channel has its own pin bundle, write data and read data ports, indexed by
channel. The `events` outputs pulse once per ACT, ChargeCache hit, PRE, PREA,
REF, RD, WR, HCRAC insertion, sweep step and read stall. They are there for
statistics.

Top-level parameters and defaults:

| parameter | default | meaning |
|---|---|---|
| `N_CHANNELS` | 2 | channels, one controller each |
| `N_CORES` | 8 | cores, one HCRAC each per channel |
| `REQ_DEPTH` | 64 | request buffer entries per channel |
| `RESP_DEPTH` | 32 | response buffer entries per channel |
| `CC_ENTRIES` | 128 | HCRAC entries per core (power of two) |
| `CC_WAYS` | 2 | HCRAC associativity |
| `CACHING_CYCLES` | 800000 | caching duration C in bus cycles (1 ms) |
| `TREFI` | 6240 | refresh interval in bus cycles |

DRAM organisation and timings are constants in `cc_pkg`. The reductions
`TRCD_RED`/`TRAS_RED` are parameters of `bank_timing`.

## Timing values

| value | cycles | source |
|---|---|---|
| tRCD / tRAS | 11 / 28 | evaluated DDR3-1600 configuration |
| reduction on a hit | 4 / 8 | evaluated ChargeCache configuration |
| caching duration | 800,000 (1 ms) | evaluated configuration |
| tRP, tCL, tCWL, tBL, tCCD | 11, 11, 8, 4, 4 | standard DDR3-1600, chosen here |
| tRTP, tWR, tWTR | 6, 12, 6 | standard DDR3-1600, chosen here |
| tRFC, tREFI | 208, 6240 | 4 Gb device, chosen here |

The circuit-level analysis behind ChargeCache also gives its lowered timings in
nanoseconds for several caching durations (1 ms: tRCD 8 ns, tRAS 22 ns;
4 ms: 9/24 ns; 16 ms: 11/28 ns; baseline 13.75/35 ns). For 1 ms that rounds up
to 7 and 18 cycles, which would be a 10-cycle tRAS reduction rather than 8. This
design uses the 4/8-cycle reduction that the performance evaluation used. For
other caching durations, set `CACHING_CYCLES` and the two reductions:

* 4 ms: 3,200,000 cycles, reductions 3/8;
* 16 ms: 12,800,000 cycles, reductions 2/5.

These cycle counts are this design's own conversion.

## Where this departs from the original description

* **Clock of C.** The caching duration is defined in processor cycles, while
  the sweep here counts controller (DRAM bus) cycles. Both measure the same
  1 ms; counting in the clock domain where the cache lives avoids a crossing.
* **tRAS reduction.** See above: 8 cycles, not the 10 that the nanosecond
  table would give.
* **One request buffer.** The evaluated controller has 64-entry read and write
  queues. Here a single 64-entry buffer holds both, and there is no separate
  write-drain policy.
* **Command generation before scheduling.** The block diagram of a controller
  shows scheduling logic followed by a command generator. Here each buffered
  request is cracked into its next command first, so FR-FCFS can see which
  requests are ready. The scheduler then picks one.
* **Own choices the description leaves open:**
  * the HCRAC set index;
  * insertion of PREA rows one per cycle;
  * per-core cache selection by the core that opened the row;
  * the refresh sequence (PREA, then REF);
  * the address map;
  * the response merge;
  * the response buffer depth.
* **Not included:** the cores and last-level cache, the DRAM devices and the
  PHY / off-chip link. Their signals are the top-level ports.

## Verification

Every block has its own self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog. Each testbench was also
run against a deliberately broken copy of its block, and reported failures.

| testbench | what it checks |
|---|---|
| `tb_hcrac` | directed miss/hit, LRU victim and invalidate cases; 3000 random inserts and lookups against a reference true-LRU model |
| `tb_cc_inval_counters` | with k = 8, C = 80: one invalidation every 10 cycles; EC order; every slot once per C |
| `tb_chargecache` | insert on PRE and on PREA (all banks); per-core separation; expiry after the sweep |
| `tb_bank_row_state` | random legal ACT/PRE/PREA against a model; close mask |
| `tb_bank_timing` | cycle-exact earliest ACT/RD/PRE after each command, with and without a hit (7/20 vs 11/28) |
| `tb_request_buffer` | random push/pop at any index against a queue model; order kept |
| `tb_command_generator` | random bank states; next command and readiness |
| `tb_frfcfs_scheduler` | directed cases: row-hit first, oldest first, refresh sequence, read stall, both row policies |
| `tb_refresh_ctrl` | request every tREFI, held until served |
| `tb_ddr3_cmd_encoder` | pin patterns and address bits of every command |
| `tb_sync_fifo` | random push/pop against a queue model |
| `tb_mem_controller` | one channel, reduced sizes: exact ACT->RD gaps of 11 and 7 cycles, data of every read, DRAM timing, all mechanisms |
| `tb_chargecache_system` | end to end, reduced sizes (4 cores, 16-entry buffers, 16-entry HCRACs, C = 4000): all mechanisms on both channels |
| `tb_chargecache_system_full` | end to end with every parameter at its default |

`tb/ddr3_channel_model.sv` stands in for a DDR3 channel. It stores written
lines, returns reads, and flags any violation of tRP, tRCD, tRAS, tRTP, write
recovery, tRFC or the bus turnarounds. It also records when each row was last
precharged. A column command sooner than 11 cycles after an ACT, or a PRE
sooner than 28, is a violation unless that row was precharged within the
caching duration. This checks ChargeCache from outside: the model knows nothing
of the HCRAC.

The end-to-end tests give every core a few rows in every bank, so the cores'
requests conflict and rows are reopened soon after they close. That is the
access pattern ChargeCache targets. The tests first write the region, then
issue random reads and writes under the open-row policy and then under the
closed-row policy. The response port is ready only 20 % of the time. Every read
is checked against the data written. The tests count each mechanism per channel
and fail if any of them never happened:

* ChargeCache hits, and lowered tRCD seen on the pins;
* insertions and sweep steps;
* PREA and REF;
* read stalls;
* hits under each row policy.

In the reduced run about 80 % of activations hit. In the full-size run (8 cores,
64-entry buffers, 128-entry HCRACs, 1 ms) the sweep steps are observed, but the
run (about 28,000 cycles, 35 us) is far shorter than 1 ms. A full expiry is
therefore exercised only at reduced C.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/cc_pkg.sv tb/tb_chargecache_system.sv \
          --top-module tb_chargecache_system -Mdir obj && ./obj/Vtb_chargecache_system
```

Substitute any testbench name. The full-size top-level testbench takes about a
minute to compile and under a second to run. Lint warnings that remain are
listed below:

* unused bits of wide structs at the command generators;
* intentionally unconnected `count`/`full` outputs;
* the reset used both asynchronously and in assertion `disable iff` clauses.

## Changing it

* **Cache size or associativity:** `CC_ENTRIES`, `CC_WAYS`. Both are powers of
  two; `CC_ENTRIES / CC_WAYS` sets.
* **Caching duration:** `CACHING_CYCLES`. Keep it a multiple of `CC_ENTRIES`.
  Change the reductions in `bank_timing` to match.
* **Other DDR3 speed bins:** the `T_*` constants in `cc_pkg`.
* **Single channel:** `N_CHANNELS = 1`.
* **Address map:** the split in `chargecache_system`.
