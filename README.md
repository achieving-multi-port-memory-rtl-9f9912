# Coded multi-port memory from single-port banks

A true multi-port SRAM is large. Replicating single-port banks so that several
cores can read at once multiplies the storage. This design takes a cheaper
route. Eight single-port data banks are shared by eight cores. Next to them
sit twelve small *parity* banks, each holding the XOR of two data banks for a
slice of the address space. When several reads want the same data bank in
the same cycle, one is read directly. The others are rebuilt as
`parity XOR other data bank`, using banks that would otherwise sit idle.
Writes use the same trick in reverse: a write to a busy bank can be parked in
a parity bank and merged back later.

The parity banks are shallow (a fraction α of a data bank). A controller
therefore keeps only the most heavily used regions of memory encoded, and
moves that coverage as the access pattern shifts.

The RTL is SystemVerilog (IEEE 1800-2017). It is synthesizable apart from the
testbenches, and all sizes are package constants or module parameters.

## Code layout (Code Scheme I)

The data banks are `a..h`. They form two independent *code regions* of four
banks each (`a..d` and `e..h`). Each code region has one parity bank per pair
of its data banks, six in all, in this fixed order:

| parity index j | 0   | 1   | 2   | 3   | 4   | 5   |
|----------------|-----|-----|-----|-----|-----|-----|
| pair           | a+b | a+c | a+d | b+c | b+d | c+d |

Parity row `s` of bank j holds `p(s) ⊕ q(s)` for the rows mapped to parity
row `s`. Any element of bank `p` can therefore be obtained in three ways:

* from `p` itself;
* from any parity bank `(p,x)` together with data bank `x`, three ways in all.

In one cycle a code region can thus serve up to 4 direct reads plus 6
degraded reads, and similarly up to 10 writes.

The code rate is `8L / (8L + 12αL)`.

Default sizes:

| quantity | value | origin |
|---|---|---|
| cores | 8 | as evaluated for this architecture |
| data banks × rows × width | 8 × 1280 × 64 bit | rows and width are this design's choice |
| regions per bank | 20 (`r = 0.05`) | partition coefficient 0.05 |
| rows per region | 64 | this design's choice |
| parity banks × rows | 12 × 192 (`α = 0.15`) | α chosen from the swept range |
| parity slots | 3 (`α/r`): 2 encoded regions + 1 reserved for building | |
| bank queue depth | 10 read + 10 write per data bank | |

The address a core presents is `{row[10:0], bank[2:0]}`, so consecutive words
go to consecutive banks. Banks 0–3 are code region 0, banks 4–7 code region 1.

## Block diagram

```
 cores ──req/busy──► core_arbiter ──► 8 read queues + 8 write queues (bank_queue, depth 10)
                                       │ pushes counted per region
                                       ▼
                         dynamic_coding_controller ── slot map, row-encode requests
                                       │
          ┌────────────────────────────┴───────────────────────────┐
  access_scheduler (region a..d)                     access_scheduler (region e..h)
   ├ read_pattern_builder                             (same)
   ├ write_pattern_builder
   ├ code_status_table
   └ recoding_unit
          │ 4 data + 6 parity bank commands                        │
     sp_bank ×10                                              sp_bank ×10
```

`coded_memory` is the top. `cm_pkg` holds the constants, the pair table and
the struct types shared by all blocks.

## Freshness: the code status table

Writes break the parity invariant. Each code region therefore keeps a status
entry per parity row and per data bank (`code_status_table`):

| status | meaning |
|---|---|
| `00` | data bank and all parities agree |
| `01` | the data bank holds the fresh value; the parities using it are stale |
| `10` | a parity bank holds the fresh value as a raw word (`ptr` names which); the data bank and the other parities are stale |

Rows outside an encoded region have no parity copies and are implicitly
`00`. Only rows that map into a parity slot are tracked, so the table is
α·L deep rather than L deep.

The status affects reads in three ways:

* A degraded read of `p(s)` through parity `(p,x)` is only allowed when both
  `p(s)` and `x(s)` are `00`.
* An element at `10` must be read raw from the parity bank named by `ptr`,
  never from its stale data bank.
* An element at `01` can only be read directly.

## Read pattern builder

Each cycle in which the scheduler chooses to read, `read_pattern_builder`
scans the four read queues, oldest entry first, in two phases.

1. **Data bank phase.** For each data bank in turn, its oldest read is served
   directly, or raw from a parity bank if that element is at status `10`.
   Right after each bank, reads in the *other* banks' queues for the *same
   row* are served through the still-idle parity bank of each pair. Here the
   data word just read is the helper.
2. **Parity phase.** Every parity bank still unused serves one more read for
   one bank of its pair. It may do so only if the other data bank of the pair
   is idle and can be read as the helper. The builder tries the first bank of
   the pair before the second.

Every served read records in a `serve_t` how to decode it: `DIRECT`, `RAW`
or `XOR` of a data and a parity bank. The scheduler registers these records.
When the banks return their words in the next cycle, it assembles up to 10
answers `{core, tag, data}` per code region. Answers can be out of order with
respect to issue; the tag identifies them.

The worked example printed with the architecture has four reads to `a` and a
mix to `b..d`. `tb_read_pattern_builder` rebuilds that example and checks the
exact set of served requests and the decode modes.

## Write pattern builder

Writes are posted, and the queues absorb them. The scheduler runs
`write_pattern_builder` only when some write queue holds 8 of its 10 entries
(or when nothing else is waiting). A write cycle commits:

* the oldest write of each data bank into that bank. For a tracked row, the
  status becomes `01` and a recoding request is pushed.
* for each parity bank `(p,q)`, one more write of `p` or `q`, stored raw in
  the parity row of the same row number. The builder chooses the bank with
  more writes still waiting (`p` on a tie). Within that bank it takes the
  oldest write that has no older write to the same row still queued, so
  program order per address holds. The status becomes `10` with `ptr = j`,
  and a recoding request is pushed. Parity writes are only made into
  *active* encoded regions. A parity bank never takes a row where it already
  holds the partner's fresh element.

One cycle can thus commit up to 10 writes per code region.

`tb_write_pattern_builder` replays the full-queue example printed with the
architecture. The status table it produces matches the printed table exactly
(rows 1–10, banks a–d). The chosen requests match too, except for one
detail: elements `c(3)` and `c(8)` end up in parity banks a+c and c+d the
other way round. The printed figure does not state the rule that breaks this
tie, and the rule used here is the simplest that reproduces everything else.

## Recoding

Every write that makes a tracked row stale pushes a request `{parity row,
source bank, stale-bank mask, cycle}` into the `recoding_unit` queue (32
entries). A recode is a two-cycle operation that owns all ten banks of the
region:

1. Read the four data words of the row. For an element at `10`, read the
   parity bank that holds it instead.
2. Write back the fresh elements held in parity banks. Write all six parities
   as the XOR of their pairs. Clear the status row to `00`.

Requests whose row is already clean (because an earlier recode of the same
row fixed it) are dropped. The unit reports `urgent` when its queue could not
absorb another full write cycle (10 requests) or its oldest request is 64
cycles old. Urgent recodes pre-empt reads; otherwise recoding fills cycles in
which there is nothing to read.

The same two-cycle datapath encodes a row for the dynamic coding controller:
read four data words, write six parities.

## Scheduling per memory cycle

Each code region has its own `access_scheduler`. Each cycle it picks exactly
one kind of work, checked in this order:

1. **write**: a write queue holds ≥ 8 entries and the recoding queue has room
   for 10 more requests;
2. **recode**: the recoding unit is urgent;
3. **encode**: a row encode is waiting and the previous pick was not an
   encode (so building a region cannot starve reads);
4. **read**: any read queued;
5. **recode**, then **encode**, then **write** (drain) when nothing else waits.

Recode and encode occupy the banks for two cycles. Read data leaves the
region one cycle after the read is scheduled. The events of each cycle are
reported on `ev` for measurement: degraded and raw reads, parity writes,
forced write cycles, recodes and encodes.

The two regions never wait for each other, except for slot eviction (below).

## Dynamic coding

Each data bank is cut into 20 regions of 64 rows. The
`dynamic_coding_controller` counts how many queue pushes fall into each
region. Every `EPOCH` = 4096 cycles it then:

1. Ranks the regions and selects the top `K = α/r − 1 = 2`.
2. If every selected region is already encoded, does nothing.
3. Otherwise picks the most accessed selected region that is not encoded. If
   both active slots are in use, it first evicts the least accessed active
   slot (`ACTIVE → EVICTING`). The slot returns to `FREE` once both code
   regions' recoding queues are empty, so no pending recode still refers to
   it.
4. Moves a free slot to `BUILDING` and asks both code regions to encode its
   64 rows through a valid/ready handshake, one row at a time.
5. When all rows are written and no engine is busy, marks the slot `ACTIVE`
   (a *region switch*, counted in `n_switches`).

While a slot is `BUILDING` or `EVICTING`, data writes into it still mark
status `01` and queue recodes, so its parities are never silently wrong. Only
`ACTIVE` slots are used for degraded reads and parity writes. Access counts
are cleared at every epoch.

## Interface of `coded_memory`

| port | dir | type | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | | clock, asynchronous active-low reset |
| `req[8]` | in | `core_req_t` `{valid, we, addr[13:0], wdata[63:0], tag[7:0]}` | one request per core per cycle |
| `busy[8]` | out | | the core must keep its request unchanged (stall) |
| `resp[2][10]` | out | `rd_resp_t` `{valid, core, tag, data}` | read answers, per code region and bank slot |
| `ev[2]` | out | `sched_ev_t` | per-cycle event counters of each region |
| `n_switches`, `n_evictions` | out | 16 bit | dynamic coding counters |

**Handshake.** A request is taken at a rising edge when `busy[c]` is low.
`busy[c]` depends only on registered state. It is high while the core's
previous request still waits for room in its bank queue.

**Ordering.** Writes are posted and never answered. A core's requests reach
their queue in order. Writes to one address commit in issue order. Reads and
writes travel in separate queues, so a read issued after a write to the same
address is **not** guaranteed to see that write. A system using this memory
must separate such accesses (the testbenches do).

**Reset.** `rst_n` clears the queues, the status tables, the recoding
queues and the slot map, but not the banks. A write parked in a parity bank
lives only there until it is recoded. Reset the memory only after it has been
idle for a while (about 2 cycles per queued recode) if its contents must
survive the reset.

**Latency.** A read answer appears on `resp` right after the third rising
edge following the request, at the earliest:

1. at the first edge the arbiter takes the request;
2. at the second it enters its bank queue, and the scheduler can pick it in
   the same cycle;
3. at the third the banks are read, and the decoded word is on `resp` during
   the following cycle.

## Departures from the architecture as published, and choices made here

* Row count, word width, region size, tag width, epoch length, the
  nearly-full threshold (8 of 10), recoding queue depth and age limit are
  this design's numbers. The architecture names L, W and T only as symbols.
* The number of encoded regions is given two ways: as `α/r − 1` plus one
  reserved slot, and as `⌊α/r⌋ = 2` for α just above 0.1. This design uses
  `α/r` slots with one reserved. With α = 0.15 and r = 0.05 that gives
  2 encoded regions, which satisfies both readings.
* The status table is indexed by parity row rather than by every data row.
  It stores which parity bank holds a fresh element (`ptr`), which the
  three-state description needs but does not spell out.
* How reads use a `10` element, the tie-breaking rules of both pattern
  builders, the scheduling priority, the recoding datapath and the
  eviction/reuse protocol are not specified in the published description.
  They are filled in as above.
* The published block picture puts the dynamic coding controller inside the
  access scheduler. Here a single controller sits beside the two code-region
  schedulers and serves both, since the encoded row ranges are the same in
  both regions.
* The extra queue for special requests (e.g. refresh) is not built: nothing
  about its requests is specified, and these banks need no refresh.
* Code Schemes II and III (20 and 9 parity banks) are alternatives to the
  scheme built here and are not implemented.
* There is no read-after-write ordering across the separate queues (see
  Interface).

## Verification

Each block has a self-checking testbench in `tb/`, named `tb_<module>`. Each
prints `TB_RESULT checks=N failures=M` and stops itself with a watchdog.

| testbench | what it checks |
|---|---|
| `tb_sp_bank` | random writes and reads of a full-size bank against a model |
| `tb_bank_queue` | random pushes and arbitrary removal masks; age order, full |
| `tb_core_arbiter` | eight cores on one bank (stall, round robin), mixed traffic, no loss or reordering |
| `tb_code_status_table` | random updates and row clears, update priority |
| `tb_read_pattern_builder` | the published read example; status `01`, `10` and unencoded rows |
| `tb_write_pattern_builder` | the published write example, including the status table; same-row order; partner conflict |
| `tb_recoding_unit` | recodes and encodes against bank and status models; urgency by age |
| `tb_dynamic_coding_controller` | hot regions selected, built, then one evicted when the hot set moves |
| `tb_access_scheduler` | one code region with real queues and banks under random traffic; a region built while running; final parity = XOR check of every encoded row |
| `tb_coded_memory` | the whole memory **at default sizes**: 8 cores, ~23 k cycles, two hot regions that move halfway |

| `tb_workloads` | three access shapes with a 1024-cycle epoch: two stationary hot bands (no switch after the first two builds, no eviction), hot traffic over five bands (repeated evictions), and a band moving every epoch (a rebuild for most moves) |

`tb_coded_memory` checks every read answer against a reference copy. It
counts each mechanism and fails if one never occurs: stalls, degraded reads,
raw parity reads, forced write cycles, parity writes, recodes, encodes,
region switches and evictions. A typical run serves about 55 k reads, up to
15 in one cycle, 6 k of them degraded. It commits 29 k writes, 11 k of them
into parity banks, with 3 region switches and 1 eviction.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -y rtl rtl/cm_pkg.sv tb/tb_coded_memory.sv \
          --top-module tb_coded_memory -Mdir obj_tb -o sim
./obj_tb/sim +verilator+rand+reset+2
```

Any other testbench works the same way with its name substituted. Variables
start at random values (`+verilator+rand+reset+2`) and everything the design
reads is reset. The full-size testbench finishes in well under a second of
simulation.

## Changing the design

* Sizes live in `cm_pkg`. A different α means changing `N_SLOTS` (parity
  depth is `N_SLOTS × REGION_ROWS`). `REGION_ROWS` and `N_REGIONS` set L.
* The epoch, nearly-full threshold, recoding queue depth and age limit are
  parameters of `coded_memory`.
* The pair table `PAIR_P/PAIR_Q` fixes which data banks each parity bank
  encodes. The builders use only the table, but the design assumes four data
  banks per code region.
