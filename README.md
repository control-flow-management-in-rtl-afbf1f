# Hanoi: per-warp control flow management for a Turing-class SIMT core

A GPU runs the 32 threads of a warp in lockstep. When a branch sends some threads one
way and the rest the other way, the hardware has to run the two groups one after the
other, and at some later point bring them back together so the warp runs at full width
again. Older GPUs did this with a SIMT stack that reconverged at the branch's immediate
post-dominator. Turing-class GPUs hand much of the job to the compiler instead. The
compiler places special instructions in the code: `BSSY` and `BSYNC` bracket a
reconvergence region, `BREAK` takes threads out of a pending reconvergence, `BMOV`
spills and restores reconvergence state, and `YIELD` lets a warp switch to another path.
Reconvergence can then happen earlier or later than the post-dominator. Later
reconvergence is what lets a spinlock inside a warp finish instead of deadlocking.

This RTL implements **Hanoi**, a control flow management unit that gives these
instructions precise semantics. Hanoi is a small block beside each warp's entry in the
core's fetch and issue logic. It tells fetch the next PC of the warp and tells issue
which threads are active. It learns the outcome of every executed instruction, with its
per-thread predicate, and updates its state. The state is two stacks, a handful of
mask registers and two thread masks: 432 bytes per warp.

The RTL holds one unit per warp (`hanoi_cfu`) and an SM-level array of 32 such units
behind 4 scheduler ports (`hanoi_sm_cfu`, the top). It is synthesizable
SystemVerilog-2017.

## 1. The per-warp state

Masks below are written with thread 0 as the right-most digit. `0100` means thread 2
alone.

| Item | Entries | Entry contents | Role |
|---|---|---|---|
| **WS stack** (warp split) | 32 | PC, active mask | One entry per path that still has to run. The top entry is the running path. Its PC is the next instruction to fetch and its mask goes to issue. |
| **REC stack** (reconvergence) | 31 | PC, Bx index (3 bits) | One entry per pending reconvergence point. The PC is where the reunited threads continue. Only the top entry is ever examined. |
| **Bx registers** | 8 | valid bit, 32-bit reconvergence mask | The set of threads a reconvergence point has to wait for. |
| **waiting mask** | 1 | 32 bits | Threads that have arrived at the current (REC top) reconvergence point. |
| **finished mask** | 1 | 32 bits | Threads that have executed `EXIT`. Threads absent at launch are also marked here. |

The sizes follow from the worst case of a 32-thread warp. If all 32 threads diverge,
there are 32 paths, so 32 WS entries. Those paths join back through at most 31
reconvergence points, so 31 REC entries. With 32-bit PCs the state adds up to
32·64 + 31·35 + 8·33 + 2·32 = 3461 bits ≈ 432 bytes.

The one non-obvious structural choice is the **indirection from REC entries to Bx
registers**. A REC entry does not hold its reconvergence mask. It names a Bx register
that does. This indirection lets `BREAK` shrink the mask of a reconvergence point that
is deep in the REC stack. It also lets several REC entries share a Bx register, because
the compiler spills a register to a general register (`BMOV B->R`) before reusing it and
restores it (`BMOV R->B`) before the older point reaches the REC top. Spilling
invalidates the Bx register. A REC top whose Bx register is invalid never reconverges,
since that register may belong to some other point at the moment.

## 2. What each instruction does to the state

After an instruction of the warp executes, the core reports it. The report holds the
instruction kind, its PC, its target, its Bx operand, its register operand and the
per-thread predicate. Control-flow instructions can carry up to two predicates: a guard
(`@P0`) and a first operand (`P1`), either one negated. The thread set that the
instruction acts on is the AND of the two, restricted to the running path. Call this
set *E*. The remaining threads of the path form *R*. "Step" is the 16-byte instruction
size.

| Instruction | Effect |
|---|---|
| `BRA target` | If *E* is empty, the top PC advances by a step. If *R* is empty, the top PC becomes the target. Otherwise the path **splits**. The larger group stays on top and runs first; on a tie the taken group runs first. The other group is placed just below it. |
| `BSSY Bx, L` | Bx ← the whole top active mask (predicates ignored), valid. Push REC (L + step, x). L is the address of the matching `BSYNC`. |
| `BSYNC` | *E* joins the waiting mask. If *R* is empty the path ends (WS pop); otherwise *R* continues at PC + step. |
| `WARPSYNC mask` | Like `BSYNC`. In addition, if the REC top is not already this point (PC + step), a free Bx register is taken. It is loaded with the mask minus finished threads, and REC gets (PC + step, that Bx) pushed. Later groups arriving at the same `WARPSYNC` find the entry already there. |
| `BREAK Bx` | Bx ← Bx & ~*E*. |
| `BMOV Rd, Bx` | Bx is read out to the register file and invalidated. |
| `BMOV Bx, Rs` | Bx ← Rs & ~finished, valid. Threads that exited while the value was parked in a register are dropped. |
| `EXIT` | *E* joins the finished mask and is removed from every Bx register. The path ends if *R* is empty, else *R* continues at PC + step. |
| `YIELD` | If the top two WS paths are **siblings**, they swap. The path that yielded moves down with PC + step. Otherwise it is a NOP. |
| `CALL`, `RET` | Top PC ← target. The return address lives in general registers, so for `RET` the core supplies it as the target. |
| anything else | Top PC ← PC + step. |

**Sibling test for YIELD.** Two paths are siblings if they will reconverge at the same
point, which must be the REC top. The test is: the REC top's Bx register is valid, and
the union of the two top active masks lies inside its mask. Swapping with a
non-sibling would run a path whose reconvergence point is not on top of REC. That would
corrupt the control flow, so the unit refuses.

**Reconvergence.** Before the WS top is offered to issue, the unit looks at the REC top.
If its Bx register is valid and every thread in the mask is waiting, the threads have
all arrived. In that case the unit spends one cycle on the following:

* pop REC;
* invalidate the Bx register;
* clear those threads from the waiting mask;
* push a WS entry (REC PC, mask).

The reunited threads then continue after the `BSYNC`. If `BREAK` and `EXIT` have
emptied the mask, the REC entry is simply dropped. Reconvergence can cascade. When an
inner point reconverges, the next REC entry is on top and may be complete at once.

**One waiting mask for all points.** A thread can wait at an outer point while an inner
point is still pending. In the early-reconvergence case, a thread that left the inner
region through `BREAK` reaches the outer `BSYNC` first. Its waiting bit simply stays
set. An inner reconvergence clears only the threads of its own mask, so the outer
arrival is still recorded when the outer point reaches the REC top. The scheme relies on
the compiler's `BREAK` having taken such a thread out of the inner mask. Otherwise the
thread would be counted as arrived at the inner point too.

## 3. Worked example: building the state snapshot

The first scenario of `tb_hanoi_cfu` starts a warp whose threads 0 to 3 exist. It runs
the short program below. Comments show the state afterwards; the top WS entry is
written first.

```
 0  BSSY B0, 30        REC (31,B0)            B0 = 1111
 1  @P EXIT   P=0001   finished 0001          B0 = 1110
 2  @P BRA 50 P=0010   WS (3,1100) (50,0010)         larger group first
 3  BSSY B1, 99        REC (100,B1) (31,B0)   B1 = 1100
 4  @P BRA 60 P=1000   WS (60,1000) (5,0100) (50,0010)   tie: taken first
60  BSYNC              waiting 1000, WS (5,0100) (50,0010)
 5  BRA 20             WS (20,0100) (50,0010)
```

That is the machine state used to explain the design: thread 2 about to run 20, thread 1
parked at 50, thread 3 waiting for the point at 100, and thread 0 finished. A `YIELD` at
20 is now a NOP. The union of the two top paths is `0110`, which is not inside B1 =
`1100`, so they are not siblings. Thread 2 then reaches `BSYNC` at 60. The waiting mask
becomes `1100` = B1, and the unit reconverges {2,3} at 100. At 100 they execute a
`BSYNC` and wait for the outer point. The unit does not compare the address of a
`BSYNC`: whichever one a path executes waits at the REC top's point. Thread 1 runs from
50 to the `BSYNC` at 30. The waiting mask then covers B0 = `1110`, so {1,2,3}
reconverge at 31 and exit.

## 4. Unit interface and timing (`hanoi_cfu`)

* **Launch.** `launch_i` with a PC and a thread mask empties everything and creates
  one WS entry. Threads outside the mask are marked finished.
* **Issue side.** `issue_valid_o`, `pc_o` and `active_mask_o` are combinational from
  the state. `issue_valid_o` is low when WS is empty or during a reconvergence cycle.
* **Update side.** `upd_valid_i`/`upd_ready_o` handshake on the clock edge. The new PC
  shows the next cycle. The unit accepts one update per cycle. The core must keep at
  most one instruction of a warp in flight between issue and update. `upd_i.pc` is
  checked against the WS top (`error_o.pc_mismatch` and an assertion).
* **BMOV read.** `bmov_data_o` is valid during the update cycle of `BMOV Rd, Bx`.
* **Status.**
  * `done_o`: every thread finished.
  * `stalled_o`: threads remain, but no path is runnable and no reconvergence is
    possible. This is a deadlock from a wrong program.
  * `error_o`: sticky stack overflow, no free Bx for `WARPSYNC`, and PC mismatch.
  * `event_o`: one-cycle pulses for divergence, reconvergence, YIELD swap and NOP,
    BREAK, both BMOV directions, partial and whole-path EXIT, and WARPSYNC allocate and
    join. They are meant for performance counters.

Priority in one cycle: launch, then reconvergence, then the update (`upd_ready_o` is
low during a reconvergence cycle).

## 5. The SM array (`hanoi_sm_cfu`, top)

The SM configuration is 32 resident warps and 4 issue schedulers. Warp *w* is served by
scheduler port *w* mod 4. Each port carries at most one update per cycle:

* the warp number;
* the raw predicate operands: enable, negate and the 32-bit register value, for both
  the guard and the operand predicate;
* the register operand.

A per-port `pred_eval` turns the predicate operands into the thread set. The port's
`upd_ready_o` and `upd_bmov_data_o` come from the addressed warp. Per warp, the top
exposes issue valid, PC, active mask, done, stalled, error, events, both stack depths,
and the waiting and finished masks. The surrounding core is not part of this RTL: fetch, instruction cache, decode,
I-buffer, GTO scheduler, scoreboard, register file and pipelines connect through these
ports. Real hardware extends the scoreboard to track Bx registers. Here a warp has one
instruction in flight and Bx updates finish in the update cycle, so that tracking is not
needed.

Synthesized (yosys, generic cells):

| | flip-flop bits | memory bits | cells |
|---|---|---|---|
| `hanoi_cfu` (one warp) | 343 | 3133 (WS + REC arrays) | 515 |
| `hanoi_sm_cfu` (32 warps) | 10976 | 100256 | 15717 |

## 6. Modules

| File | Contents |
|---|---|
| `rtl/hanoi_pkg.sv` | Default sizes, instruction kind `cf_op_e`, WS operation `ws_op_e`, update, event and error structs. |
| `rtl/pred_eval.sv` | Two optionally negated predicates, ANDed (a missing one counts as true). |
| `rtl/ws_stack.sv` | WS stack: init, set-top, push, pop, split (rewrite top and push above it), swap of the top two. Exposes the top two entries. |
| `rtl/rec_stack.sv` | REC stack: clear, push, pop. Exposes the top entry. |
| `rtl/bx_regfile.sv` | Bx registers: write, BREAK clear, invalidate, EXIT clear in all registers, two read ports, lowest-free allocator. |
| `rtl/status_masks.sv` | Waiting and finished masks. |
| `rtl/hanoi_cfu.sv` | One warp's unit: the instruction semantics and the reconvergence check. |
| `rtl/hanoi_sm_cfu.sv` | Top: 32 units, 4 scheduler ports with predicate evaluation. |

The default sizes are module parameters: `WARP_SIZE`, `NUM_BX`, `WS_DEPTH`,
`REC_DEPTH`, `PC_STEP`, and at the top `NUM_WARPS` and `NUM_SCHED`. The PC width is the
package constant `DEF_PC_W` (32), because the update struct carries PCs. Stack
overflow, underflow, updates without a path and updates from the wrong port are also
caught by concurrent assertions.

## 7. Testbenches and how to run them

Every testbench checks itself and ends with
`TB_RESULT checks=<n> failures=<m>`.

| Testbench | What it does |
|---|---|
| `tb_pred_eval` | All enable/negate combinations on random values. |
| `tb_ws_stack`, `tb_rec_stack`, `tb_bx_regfile`, `tb_status_masks` | Random operation sequences against a reference model. The stacks are filled to full depth. |
| `tb_hanoi_cfu` | One warp through hand-checked traces: the snapshot above, nested branches with a BMOV spill, early reconvergence with BREAK, the spinlock that only finishes because of YIELD, and WARPSYNC, predicated EXIT, BMOV filtering and CALL/RET. Each step checks PC, mask and the number of cycles the unit withheld the path. |
| `tb_hanoi_cfu_random` | 200,000 random instructions on one unit with random predicates, targets, Bx operands and thread masks. After every cycle, issue, ready, top PC and mask, stack depths, waiting, finished, done and stalled are compared with an independent array-based model of the state. Random programs deadlock often, so the warp is relaunched whenever it finishes or stalls, and now and then mid-run. Cascaded and empty reconvergences, YIELD swaps and WARPSYNC joins all occur. |
| `tb_hanoi_sm_cfu` | The top at full default size. Thirty-two warps run five programs side by side through the four ports with round-robin schedulers: nested, early, spinlock, WARPSYNC, and a 32-way divergence that fills the WS stack. Warps 25 to 31 start half-populated. Checks include: every reconvergence point runs once with the whole warp, each thread enters the critical section alone and once, and all warps finish. Every mechanism is counted and must occur. It completes in about 480 cycles. |

With Verilator 5, from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl +libext+.sv \
    rtl/hanoi_pkg.sv tb/tb_hanoi_sm_cfu.sv --top-module tb_hanoi_sm_cfu
./obj_dir/Vtb_hanoi_sm_cfu
```

Replace the testbench name to run another one. Each run ends with a
`TB_RESULT` line, and the top-level run prints its mechanism counts. The RTL does not
depend on power-up values: everything that is read is reset, so the results also hold
with Verilator's random initialisation (`+verilator+rand+reset+2`).

## 8. Where this RTL departs from, or adds to, the published description

The instruction semantics and the state organisation above are Hanoi's. The following
points were not specified and are choices made here:

* **BSSY order in the early-reconvergence example.** The example lists `BSSY B0`
  (inner point) before `BSSY B1` (outer point) in the same block. With REC as a stack,
  the outer point would then sit on top, and the inner early reconvergence could never
  fire. The tests push the outer point first, which gives the reconvergence order the
  example describes.
* **BSSY target in the spinlock example.** The example's listing writes `BSSY B0, D`,
  but its `BSYNC B0` sits in block E, after the lock release. A `BSSY` always names its
  `BSYNC`, and reconverging before the release would deadlock, so the tests use E.
* **REC PC of BSSY.** `BSSY` names the `BSYNC`. The REC entry stores the address after
  it, because the REC PC is where the reunited threads continue.
* **Predicated-off threads** at `BSYNC` and `WARPSYNC` continue with the next
  instruction. The published description gives this rule only for `EXIT`.
* **Branch tie.** On a tie, the taken path runs first. The description says the
  majority path goes first, and its examples run the taken path first.
* **Finished threads** are dropped from a `WARPSYNC` mask, as they are from a BMOV
  restore.
* **Empty reconvergence.** A reconvergence whose mask became empty drops its REC entry
  without creating a path.
* **Bx allocation.** `WARPSYNC` takes the lowest-numbered invalid Bx register. If none
  is free, an error is flagged and no entry is pushed. The description assumes the
  compiler prevents this.
* **Reconvergence cost.** Reconvergence costs one cycle in which the warp cannot issue.
  The core keeps one instruction per warp in flight.
* **CALL/RET.** Their modifiers are not modelled and their predicates are ignored.
* **BSYNC operand.** The Bx operand of `BSYNC` is not used. Reconvergence always goes
  through the REC top.
* **Encoding and ports.** Instruction encodings are this design's own, as are the
  warp-to-scheduler mapping and the port layout.
* **PC width and step.** The 32-bit PC width is inferred from the 432-byte storage
  figure. The 16-byte step is the Turing instruction size.

Not covered:

* The ten Turing control-flow instructions that never appeared in the studied programs:
  `BPT`, `BRX`, `BRXU`, `JMP`, `JMX`, `JMXU`, `KILL`, `NANOSLEEP`, `RPCMOV` and `RTT`.
  Their semantics are unknown.
* Runtime heuristics of real hardware, such as occasionally skipping a `BSYNC`
  reconvergence. Hanoi always reconverges.
* The SIMT core around the unit, and replication to a 30-SM GPU.
