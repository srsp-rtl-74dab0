# sRSP: selective remote scope promotion in a GPU L1/L2 memory system

GPU L1 caches are not kept coherent by hardware. Programs synchronise
through *scoped* atomics instead. A release at **work-group (wg) scope**
only has to make its writes visible inside the compute unit (CU), so it
completes in the CU's own L1. A release at **device (cmp) scope** must
first write all dirty L1 data back to the shared L2. A device-scope
acquire must also invalidate the L1. Cheap wg-scope synchronisation
is a big win when data is nearly always shared inside one CU.

Work stealing breaks that. A queue is used almost only by its owner (the
*local sharer*), but now and then another CU (a *remote sharer*) steals
from it. Remote Scope Promotion (RSP) lets the owner keep using wg
scope, and gives the thief *remote* operations that promote the owner's
synchronisation after the fact. In RSP, a remote acquire makes **every**
L1 in the GPU flush, and a remote release makes every L1 invalidate,
which costs more the more CUs there are.

sRSP makes both operations selective:

* each L1 remembers **where its last local release of each
  synchronisation variable was** (the LR-TBL);
* a remote acquire flushes only the L1 that actually released that
  variable, and only up to that release;
* a remote release does not invalidate anything at once. Each L1 notes
  the address (PA-TBL), and that L1's *next* local acquire of the
  address is promoted to device scope.

This repository holds synthesizable SystemVerilog for that memory system:
64 L1 caches with the sRSP tables, and a shared L2 that orders the remote
operations. Compute units are replaced by request ports.

## Blocks

```
 CU port 0 ... CU port 63                (cu_req / cu_resp, per CU)
     |             |
  l1_cache ... l1_cache   each: data array + sfifo + lr_tbl + pa_tbl + FSM
     |  req/resp, write-back, probe/ack  |
     +--------------- l2_cache ----------+   arbiter, block lock, probe fan-out
```

| file | what it is |
|---|---|
| `rtl/srsp_pkg.sv` | widths, request/response structs, operation enums, `amo_apply` |
| `rtl/sfifo.sv` | FIFO of dirty block addresses (16 entries); exposes push index and head index |
| `rtl/lr_tbl.sv` | local-release table: CAM from address to sFIFO slot, with a "still in the FIFO" bit |
| `rtl/pa_tbl.sv` | promotion table: set of addresses whose next local acquire must be promoted |
| `rtl/l1_cache.sv` | 16 kB, 16-way, 64 B-block write-combining L1 with the sRSP controller |
| `rtl/l2_cache.sv` | shared L2: request arbiter, atomics, block lock, probe broadcast |
| `rtl/srsp_top.sv` | 64 L1s and one L2 wired together |

## The sFIFO and the two tables

The **sFIFO** lists dirty blocks in the order they were first written. Every
store or local atomic pushes its block address. A flush pops entries oldest
first, and the L1 writes back the dirty words of each popped block. A clean
or already-evicted block is dropped in one cycle. When the FIFO is full, a
push first pops and writes back the head (an *overflow write-back*). So the
sFIFO is also what limits how much dirty data a CU holds.

Each sFIFO slot has a fixed index (0..15). When a **local release** is done
in the L1, the block of the lock variable is pushed, and the LR-TBL stores
`{address, index of that push}`. Everything written before the release sits
at or before that slot. So "flush up to the slot" is exactly what makes the
release visible. Each LR entry also has a *pending* bit, cleared when its
slot is popped. A lookup tells whether the recorded slot is still in the
FIFO.

The **PA-TBL** is a small set of block addresses. A hit turns a local
(wg-scope) acquire into a device-scope acquire:

1. flush the whole sFIFO;
2. flash-invalidate the L1, which empties the LR-TBL and the PA-TBL;
3. do the atomic at the L2.

## The four remote sequences

These are the hardest part of the design. Below, "owner" is the CU that
last did a local release of lock `L`, and "thief" is the CU doing the
remote operation.

**Local release by the owner (wg scope).** The atomic is done in the owner's
L1. The block goes into the sFIFO, and the LR-TBL records `{L, slot}`.
Nothing reaches the L2.

**Remote acquire by the thief (`rm_acq`).**
1. The thief's L1 looks `L` up in its own LR-TBL. If it hits, the owner is
   on the same CU, and the op is done as a local acquire (the *shortcut*).
2. Otherwise the thief sends `L2_SELFLUSH(L)`. The L2 **locks** block `L`
   and raises a selective-flush probe to every other L1.
3. Each probed L1 looks `L` up. On a miss it acks at once. On a hit it pops
   and writes back its sFIFO up to and including the recorded slot (the
   whole sFIFO if the slot was already popped). It then inserts `L` into
   its own PA-TBL, because the owner's next acquire must see what the thief
   will write, and then acks.
4. While the acks are being collected, the thief flushes its own sFIFO.
   When all acks are in, the L2 answers.
5. The thief invalidates its L1 and sends the atomic to the L2. That atomic
   releases the lock. While the lock is held, reads, atomics and selective
   flushes of `L` from other L1s wait. So no second thief, and no promoted
   owner, can slip in between steps 2 and 5.

**Remote release by the thief (`rm_rel`).**
1. The thief flushes its sFIFO.
2. The thief does the atomic at the L2 with `hold` set, which locks `L`
   again.
3. The thief sends `L2_SELINV(L)`. Every L1 inserts `L` into its PA-TBL
   and acks.
4. When all acks are in, the lock is released and the thief gets its answer.

`rm_ar` (acquire-release) does the acquire steps, then the release steps.

**Promoted acquire by the owner.** The owner's next wg-scope acquire of `L`
hits its PA-TBL. It runs as a device-scope acquire: flush, invalidate,
atomic at the L2. So it sees the thief's data.

Probes reach an L1 while it is idle, or while it is waiting for the L2, so
two thieves that wait on each other's probes cannot deadlock. Write-backs
have their own channel, which the L2 drains in every state except its
array-update cycle. A probed L1 can therefore flush while the L2 waits for
acks.

## Where this RTL departs from, or adds to, the paper

The paper describes the protocol at the level of messages. These choices
were needed to make it correct in cycle-level hardware, and were found by
the lock stress test:

* **The lock during a remote release.** Without it, another L1 can read
  the released value in the window between the thief's atomic and its
  selective invalidation. That L1's PA-TBL would miss, and it would
  enter the critical section with stale data. The paper only locks
  during a remote acquire.
* **A CAS writes only if it succeeds.** A failed compare-and-swap leaves
  the block clean and out of the sFIFO. Otherwise it would write the old
  value back over a newer value later.
* **A failed promoted acquire keeps its promotion.** A spin-lock
  CAS that fails after a promotion puts `L` back into the PA-TBL.
  The invalidation had emptied it, and the retry must be promoted too.
* **A drained LR entry flushes everything.** If the recorded slot has
  already left the sFIFO (overflow, or an earlier flush), the slot index
  may have been reused. The probe then flushes the whole sFIFO.
* **Table overflow.** The LR-TBL and PA-TBL each hold 8 entries. The paper
  gives no size. When the LR-TBL is full, a sticky overflow flag makes every
  selective-flush probe flush the whole sFIFO. When the PA-TBL is full, its
  overflow flag promotes every local acquire until the next flash
  invalidation clears both tables.
* **The L1 is write-combining and allocate-on-write.** A store marks only
  its word valid and dirty. Write-backs carry a per-word mask. Replacement
  is round-robin per set, and an evicted dirty block is written back
  first.
* **One CU request at a time per L1.** All other CU requests wait, which the
  paper asks for only during a remote acquire.

Not modelled:

* the L2 tags, misses to DRAM, and the L2's own sFIFO. The L2 is a flat
  512 kB memory that always hits. Only wg and device scope exist, so
  the L2 sFIFO (system scope) has no use here;
* the compute units;
* the instruction cache;
* the RSP baseline the paper compares against.

## Interfaces and timing

* **CU port** (`srsp_top`, per CU):
  * `cu_req_valid/ready` with a `cu_req_t`, which holds `op` (load, store,
    atomic), `amo` (ld/st/cas/add), `scope` (wg/cmp), `sem`
    (none/acq/rel/ar), `remote`, a byte address and `wdata`/`cmp`;
  * `cu_resp_valid` pulses for one cycle with `cu_resp_rdata`. For an
    atomic, `cu_resp_rdata` is the old value.
* **Latency:**
  * an L1 hit answers 4 cycles after acceptance (`HIT_LAT`);
  * an L2 read or atomic takes 24 cycles (`LAT`);
  * probes add the time the probed L1s need to flush;
  * an sFIFO pop takes one cycle per clean entry, and a dirty entry takes
    one write-back handshake.
* **Reset:** asynchronous, active low. It clears all valid bits, the FIFOs
  and the tables. Data arrays are not reset.

Parameters of `srsp_top`, with defaults matching the paper's GPU
configuration:

* `N_CU=64`;
* `L1_BYTES=16384`, `L1_WAYS=16`;
* `SFIFO_DEPTH=16`;
* `L1_LAT=4`;
* `L2_BYTES=524288`, `L2_LAT=24`;
* `LR_ENTRIES=8`, `PA_ENTRIES=8`. These two are this design's own.

The 64-byte block is fixed in `srsp_pkg`.

## Testbenches and simulation

Each testbench checks itself and ends with a line
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb/tb_sfifo.sv` | random push/pop against a queue model, indices, full/empty |
| `tb/tb_lr_tbl.sv` | insert, update, lookup, pending clear on pop, overflow, clear |
| `tb/tb_pa_tbl.sv` | insert, duplicates, overflow, clear |
| `tb/tb_l1_cache.sv` | one L1 against an L2 model: hit latency, fills, every sync op, probes |
| `tb/tb_l2_cache.sv` | 4-port L2: latency, atomics, lock blocking, probe fan-out, write-backs |
| `tb/tb_srsp_top.sv` | full 64-CU system at default parameters (see below) |

`tb_srsp_top` first replays a steal: owner release, thief remote acquire
and release, and the owner's promoted acquire. It then runs a lock stress:

* CU0 uses wg scope;
* three thieves (CUs 1, 17 and 42) use remote operations;
* four CUs run unrelated traffic, including a same-set store burst.

It checks mutual exclusion and the final counter. It also counts every
mechanism, and a mechanism that never happens counts as a failure:

* LR record;
* selective-flush hit and miss;
* selective invalidation;
* promotion;
* kept promotion;
* device-scope invalidation;
* sFIFO overflow;
* eviction;
* L2 lock stall;
* same-CU shortcut.

It runs at the top's default parameters. Building it takes a few minutes,
and the run itself under a second.

To simulate with Verilator 5, for example the full system:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_srsp_top \
    rtl/srsp_pkg.sv rtl/sfifo.sv rtl/lr_tbl.sv rtl/pa_tbl.sv \
    rtl/l1_cache.sv rtl/l2_cache.sv rtl/srsp_top.sv tb/tb_srsp_top.sv
./obj_dir/Vtb_srsp_top
```

For a unit testbench, list the package, the module and its sub-modules,
and the testbench. To try a smaller system, copy `tb_srsp_top.sv` and set
`N` and the top's `N_CU` lower. The stress CUs must stay below `N`.

## How far to trust it

* The protocol has been exercised by directed tests and one randomised
  lock stress, not proven.
* Lint with Verilator and elaboration with slang are clean of errors.
  Warnings remain for:
  * asynchronous-reset nets also used in assertions' `disable iff`;
  * unused high bits of loop indices.
* Performance numbers of the paper (speed-ups on MIS, PageRank and SSSP)
  cannot be reproduced with this RTL alone, because there are no compute
  units to run the kernels.
