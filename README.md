# Steering ineffectual micro-ops to a side pipeline

A wide out-of-order core spends much of its scheduler, register-file port and
result-bus budget on instructions whose results never matter to the program's
outcome: values that only feed branches the predictor already got right,
predicated moves that do not happen, indirect jumps that go where predicted,
or registers that are overwritten before anyone reads them. This RTL
implements the hardware that finds such *ineffectual* micro-ops after they
commit, remembers them in the micro-op cache, and the next time they are
fetched sends them to a small in-order side pipeline (the *I-pipe*) instead
of the out-of-order primary cluster. The primary cluster therefore sees fewer
micro-ops, and the front end and renamer can be made wider without widening
the expensive out-of-order machinery.

Because the choice is a speculation (the branch that was predicted right last
time may be mispredicted this time), the design also contains a detector that
verifies the speculation before commit and a recovery path that rolls the
machine back and replays the affected code without it.

The base core itself (decoders, branch predictor, out-of-order scheduler,
execution units, load/store unit, caches) is not part of this RTL. The top
module exposes the points where it connects: fetch, the free list of physical
registers, dispatch to the primary cluster and the primary writeback ports.

## The idea in one example

Take this loop body (registers renamed r1..r15, flags written by compares and
arithmetic):

```
i5   mov  r5, #123        ; r5, r6 are never read again before being rewritten
i6   add  r5, r5, r1
i7   xor  r6, r5, r1
i8   and  r2, r1, r7
i9   cmp  r2, r7
i10  b.eq somewhere       ; predicted correctly
```

`i10` is correctly predicted, so `i9` exists only to let the processor
check a prediction it already got right (and `i8` too, once `r2` is
rewritten before anything else reads it). `i7` writes `r6`, which
is overwritten before being read, so `i7` is dead and so are `i6` and `i5`,
whose only consumers are dead. Once these are known, the next execution of
the loop can run them on the side: the primary cluster only needs the
remaining instructions. If, on some later iteration, `i10` turns out to be
mispredicted, the side pipeline notices (it still executes the compare and
the branch) and the core rolls back.

Two kinds of starting points (*pivots*) seed the search:

* **C (control) pivots**: a branch or indirect jump that committed with a
  correct prediction, or a predicated move that was correctly predicted not
  to execute.
* **D (data) pivots**: a micro-op every one of whose results was overwritten
  before any read ("register-ineffectual").

From each pivot the search walks back through the producers: a producer is
ineffectual when *all* of its consumers are ineffectual and every register it
writes is written again later. Memory operations are never tagged, and a
producer read by a memory operation stays effectual. The default build uses
both pivot classes (CD); the parameters `PIVOT_C` and `PIVOT_D` select C only
or D only.

## Windows

Everything is organised in *windows* of 10 micro-ops (`ineff_pkg::WIN`):

* The ROB holds 370 entries, 37 windows. An entry's window is its index
  divided by 10. The oldest window is *portion A*, the next is *portion B*,
  the rest is *portion C*.
* Commit retires a whole window (portion A) at once.
* The Detection Buffer keeps the last 4 committed windows (40 entries). The
  analysis looks at 3 consecutive windows and takes pivots only from the
  middle one, so every pivot has a window of consumers after it and a window
  of producers before it.
* Register-ineffectual pivots are found at rename, but only when the
  overwritten producer is in the same window as the overwriter or the one
  before it.

## How a micro-op flows

```
 fetch (10/cycle) --> ineffectual bit read (uop_ineff_tags, one bit per micro-op cache slot)
        |
        v
 rename_steer --- effectual (<= 6/cycle) ---> primary cluster (outside; disp_* ports)
   |  |  \------- ineffectual (<= 4/cycle) -> irs (128) --> ipipe (4 lanes)
   |  |                                                      |   I-PRF (16 GPR + flags)
   |  +--> rpm (dead-register marks)                          |   M-PRF mirror (280)
   v                                                          v
 rob (370) <---- completion: primary writeback (pwb_*)  +  I-pipe writeback
   |
 mdre: verify portion B, commit portion A / roll back / bottleneck flush
   |
 detection_buffer (4 windows) --> detection_engine --> set bits in uop_ineff_tags
```

### Rename and steering (`rename_steer`, `rpm`)

Each cycle up to 10 micro-ops arrive with the ineffectual bit of their
micro-op cache slot. The renamer takes the longest in-order prefix that fits:
at most 6 effectual micro-ops (each writer gets a physical register from the
base free list), at most 4 ineffectual ones (they need an I-RS slot and no
physical register: they write the I-PRF entry of their architectural
register), and room in the ROB. A map table records for every architectural
register (16 GPRs plus the flags) whether its newest value lives in the I-PRF
or in a physical register, and every source is looked up there. Flags are
treated as a 17th architectural register; a micro-op that writes a GPR and
the flags gets a single physical register that holds both.

If the first micro-op that could not be taken is ineffectual and the I-RS is
full, the renamer raises `irs_blocked`.

The Register Producer Map (`rpm`) runs alongside. For each architectural
register it keeps the ROB index of the last writer and whether anybody has
read that value. When a new writer arrives and the previous value was never
read, the previous writer is marked dead for that register (if it is in the
current or the previous window). The ROB combines the GPR and flags marks: a
micro-op is a D pivot only when all of its destinations are dead.

### The I-pipe (`irs`, `ipipe`, `iprf`, `mprf`, `ipipe_alu`)

The I-RS is a FIFO. The I-pipe looks at its 4 oldest entries and issues the
longest in-order prefix whose operands are available, in one cycle, through
4 ALUs. Operands come from:

* the **I-PRF**, one 64-bit register per architectural GPR plus one flags
  register, written only by the I-pipe. A source produced by an earlier
  micro-op of the *same* issue group is not forwarded; that micro-op waits
  one cycle.
* the **M-PRF**, a mirror of the primary physical register file (280
  entries). Every primary writeback that produces a value is also written
  here, with a ready bit cleared when the register is allocated. This keeps
  the I-pipe off the primary file's read ports.

The I-pipe computes results, flags, branch outcomes and indirect-jump
targets. When an ineffectual branch, jump or predicated move disagrees with
its prediction, it reports a *Type-A misspeculation* to the ROB. The I-pipe
never writes the primary files. An effectual micro-op whose source was last
written by an ineffectual one is told so by its operand location
(`disp_loc_*`, `in_iprf`), and the primary cluster must take that operand from
the I-PRF; this happens only when a tagging was wrong.

### Verification and recovery (`rob`, `mdre`)

The Misspeculation Detection and Recovery Engine looks at portion B once it
is full and complete:

* **Clean**: portion A commits (when the Detection Buffer has room).
* **Type-A misspeculation in A or B**: the pipeline is flushed, the
  ineffectual bits of the 20 micro-ops of A and B are cleared in the
  micro-op cache (one per cycle), and fetch restarts at the first micro-op
  of A. The replay runs those micro-ops as effectual, so it cannot fail the
  same way. The speculative map table is restored from a committed map kept
  at window commit, which is exactly the state at the start of portion A.
  A *Type-B misspeculation* (an effectual micro-op that consumed an
  ineffectual value) can only arise downstream of a Type-A one and is covered
  by the same rollback.
* **I-pipe bottleneck**: the I-RS can fill, for example when its oldest entry
  waits for a long cache miss, and the renamer then stalls. A monitor counts
  blocked cycles; 64 of them within a 1024-cycle epoch trigger a flush that
  clears *all* ineffectual bits and restarts at portion A. The design then
  re-learns from scratch.

### Detection (`detection_buffer`, `detection_engine`)

Committed windows enter the Detection Buffer. With three windows present,
the Detection Engine analyses them. It builds the producer-to-consumer graph
of the 30 micro-ops (registers only) and finds the ineffectual set as a
fixed point:

```
T0     = pivots in the middle window (not memory operations)
T(n+1) = T(n) + { k : k is not a memory op, k has a consumer in the three
                      windows, every register k writes is rewritten later in
                      the three windows, and every consumer of k is in T(n) }
```

One step per cycle; a chain of d producers takes d+2 cycles. This gives the
same set as a recursive walk that re-examines a producer each time one of
its consumers is tagged. The slots of the tagged micro-ops are then written,
one per cycle, into the ineffectual-bit store, and the oldest window leaves
the buffer. While the buffer is full (4 windows), commit waits.

## Parameters

| Name | Default | Where | Meaning |
|---|---|---|---|
| `WIN` | 10 | package | micro-ops per window |
| `ROB_WINDOWS` | 37 | package | ROB windows (370 entries) |
| `DB_WINDOWS` | 4 | package | Detection Buffer windows (40 entries) |
| `IPIPE_W` | 4 | package | I-pipe lanes, and ineffectual renames per cycle |
| `REN_EFF` | 6 | package | effectual renames per cycle |
| `REN_W` | 10 | package | micro-ops offered to rename per cycle |
| `IRS_SIZE` / `IRS_N` | 128 | package / top | I-RS entries |
| `NUM_PREG` | 280 | package | physical integer registers (M-PRF mirror) |
| `UOPC_ENTRIES` / `UOPC_N` | 2304 | package / top | micro-op cache slots with an ineffectual bit |
| `PWB_PORTS` | 10 | package | primary writeback ports (assumed: one per issue slot) |
| `EPOCH`, `THRESH` | 1024, 64 | top | bottleneck rule (assumed values) |
| `PIVOT_C`, `PIVOT_D` | 1, 1 | top | pivot classes (CD) |

## What is this design's own

The structure sizes, the window organisation, the pivot rules, portions
A/B/C, the rollback to portion A with reset of A and B's bits, the
bottleneck flush, the 6 + 4 rename split and the M-PRF mirror are taken from
the published design. These choices are this implementation's own:

* The micro-op format (`ineff_pkg::uop_t`): a tiny register ISA with
  at most one GPR destination plus flags, two register sources and an
  immediate. The real machine runs x86 micro-ops.
* The fixed-point formulation of the detection algorithm and its one step
  per cycle timing.
* The dead marks kept per destination (GPR and flags).
* The committed map used as the window-start checkpoint.
* Single-cycle I-pipe execution without bypass inside an issue group.
* The exact bottleneck rule (64 blocked cycles in a 1024-cycle epoch).
* Clearing the A/B bits one per cycle, before the restart.
* Commit requires both A and B complete and clean, and waits while the
  Detection Buffer is full.
* Register-file ports. The published description gives the I-PRF two read
  ports and one write port, and the M-PRF two read ports. Here those counts
  are per I-pipe lane, plus a flags read, so that 4 micro-ops can issue
  together. The M-PRF has 10 write ports, one per primary writeback port.
  The primary register file's port count is not published.
* The micro-op cache reorganisation (more micro-ops per way, same size) is
  not modelled. Only the added ineffectual bit per slot is built.
* A primary branch misprediction is only recorded (it disqualifies the
  branch as a pivot); redirecting fetch is the base core's business.

Not built: the base core (primary cluster, front end and decoders, branch
predictor and branch order buffer, memory system) and the vector halves of
the I-PRF and M-PRF, for which no vector operations are defined. The
ineffectual-bit store holds only the added bit per micro-op cache slot, not
the cache itself.

## Files

`rtl/` holds one module or package per file. `ineff_core.sv` is the top. Each
file begins with a description of its function, interface and timing.
`tb/tb_<module>.sv` is the self-checking testbench for each module. Each
prints `TB_RESULT checks=N failures=M` and has a watchdog.

* `tb_detection_engine` runs a hand-worked 15-micro-op example over three
  windows of 5, and 400 random windows against a recursive reference.
* `tb_ineff_core` runs the whole design at its default size for 40,000
  cycles. It provides a behavioural front end with a last-outcome
  predictor, a reference-counted free list, and a primary cluster with
  random latency that returns the results of an in-order reference model.
  One load in 16 iterations takes 300 cycles. It checks commit order,
  restart addresses, that every rollback was justified, and that no
  mispredicted ineffectual micro-op ever commits. It requires every
  mechanism to occur: commits, detection runs, bits set, I-pipe issue,
  C and D pivots, rename stalls, I-RS full, rollbacks, bottleneck flushes
  and primary mispredictions. One run takes about a second.

* `tb_ineff_core_configs` runs the same program on three more
  configurations side by side: C pivots only, D pivots only, and CD with a
  64-entry I-RS. A pivot class that is switched off must never appear, and
  without C pivots there must be no rollback. The shared driver and checker
  of both end-to-end tests is `tb/core_harness.sv`.

The test program is not a benchmark. The primary cluster model has no
width limits, so cycle counts from these runs say nothing about speed-up.

To simulate a module with Verilator:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb rtl/ineff_pkg.sv \
    rtl/ineff_core.sv tb/tb_ineff_core.sv --top-module tb_ineff_core -o tb
./obj_dir/tb
```

Replace the top and the testbench names to run the other modules. The
package must come first.
