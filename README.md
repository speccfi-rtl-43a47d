# SpecCFI in SystemVerilog: CFI labels as a guard on speculation

Spectre-BTB and Spectre-RSB attacks work by steering a victim's *speculative*
control flow. The attacker poisons the branch target buffer or the return
stack, so that a mispredicted indirect branch or return runs a leaking gadget
before the misprediction is noticed. Label-based control-flow integrity (CFI)
already says which targets are legal:

- every indirect `call`/`jmp` carries a label;
- every legal target begins with a `cfi_lbl` instruction carrying the same label;
- every return must go back to the address its call pushed.

Today that rule is enforced only on *committed* instructions. SpecCFI enforces
it on *speculative* instructions as well:

- **Forward edges.** At decode, the first micro-op after an indirect branch
  must be a `cfi_lbl` with the branch's label. If it is not, an `lfence`
  micro-op is inserted, so the unverified path cannot execute loads before the
  branch resolves. On a legal path nothing is delayed.
- **Backward edges.** The return stack buffer is turned into a *precise
  shadow call stack* (the RSB/SCS):
  - push and pop happen at decode;
  - the committed part is tracked with a last-committed pointer (LCP);
  - every squashed call or return is undone exactly;
  - the stack spills to, and fills from, a protected in-memory stack when it
    runs full or empty, and across context switches.

  Return predictions therefore always come from this thread's own call
  history, which other code cannot poison.
- **Committed path ("full" mode).** The same labels and the popped return
  addresses are checked again at commit, giving conventional CFI and raising a
  violation on a real hijack.

This RTL implements the unit that does these three things for one hardware
thread. It is meant to be attached to a host core's decoder, ROB and
retirement logic.

## Block structure

```
            dec_* (decoded micro-op, BTB target)
                 |
        +--------v---------+   lfence inserted on a failed label check
        | decode_cfi_check |------------------------------+
        +--------+---------+                              |
                 | call / ret                             v
        +--------v---------+  pop_addr   +------------------------------+
        |     rsb_scs      |-----------> | target mux: ret ? RSB : BTB  |--> uop_*
        | 16 entries, LCP  |             +------------------------------+
        +--+-----------^---+
   spill/  |           | commit / annul strobes
   fill    v           |
     mem_* port  +-----+----------+
                 |  rob_rs_track  |  OLD_RS per in-flight micro-op, annul walk
                 +-----+----------+
                       | oldest entry (class, OLD_RS, hit)
                 +-----v------------+
                 | commit_cfi_check |--> viol_valid / viol_cause
                 +------------------+
```

| File | Contents |
|---|---|
| `rtl/speccfi_pkg.sv` | 32-bit label and address types; micro-op classes; the decoded micro-op struct; violation causes |
| `rtl/decode_cfi_check.sv` | Four-state forward-edge checker with the decode-stage CFI_REG |
| `rtl/rsb_scs.sv` | The combined RSB / shadow call stack: storage, TOS, LCP, spill/fill and context controller |
| `rtl/rob_rs_track.sv` | The ROB's OLD_RS field, kept as a side array in step with the host ROB; drives the annulment walk |
| `rtl/commit_cfi_check.sv` | Commit-stage CFI_REG and comparator, plus the return-address check |
| `rtl/speccfi_top.sv` | Wires the above together and selects the predicted target (RSB/SCS for returns, BTB otherwise) |

Default sizes are those of the evaluated configuration:

| Parameter | Default | Meaning |
|---|---|---|
| `RSB_DEPTH` | 16 | in-processor entries |
| `RSB_CHUNK` | 4 | LCP step for overflow/underflow |
| `ROB_DEPTH` | 224 | ROB entries |
| `LABEL_W` | 32 | label width |
| `COMMIT_CHECK` | 1 | full mode |

## Forward edges: the decode-stage label check

The checker is the four-state machine of the design:

| State | Event | Next state |
|---|---|---|
| INITIAL | indirect call/jmp (CFI_REG ← its label) | WAITING |
| WAITING | `cfi_lbl` (its label is latched) | CHECK |
| WAITING | anything else | FENCE |
| CHECK | labels equal | INITIAL |
| CHECK | labels differ | FENCE |
| FENCE | lfence emitted | INITIAL |

Timing, which matters for performance:

- **Legal path: no bubble.** In CHECK, the comparator works on registered
  values. Meanwhile the *next* micro-op is already accepted and handled exactly
  as INITIAL would handle it, even if it is another indirect branch.
- **Failed check: two cycles.** The first is the cycle in which WAITING (wrong
  class) or CHECK (wrong label) detects the fault; nothing leaves decode in
  that cycle. The second is the slot of the inserted lfence.
- **Where the lfence goes.** If the offender is not a `cfi_lbl`, it is held and
  the lfence goes out ahead of it. If it is a `cfi_lbl` with the wrong label,
  the `cfi_lbl` has already passed (it does nothing itself) and the lfence
  follows it. Either way, the lfence precedes every micro-op of the gadget
  body.
- **Flushes.** Any flush, including the cycles of an annulment walk, returns the
  machine to INITIAL. The branch that opened the check has then been squashed
  or resolved. The refetched, resolved target is therefore not checked again
  at decode; its `cfi_lbl` is checked at commit.

The lfence is marked by `uop_fence` and carries class `IC_OTHER`. Whether it is
a strict fence or a load-only (LSQ) fence is up to the host's issue logic.

## Backward edges: keeping the RSB/SCS precise under speculation

This is the subtle part of the design.

### Two pointers

The stack has a speculative top and a committed top.

| Signal | What it counts | How it changes |
|---|---|---|
| `tos_cnt` | entries as the front end sees them | call at decode: +1; ret at decode: −1 |
| `lcp_cnt` | entries as committed code sees them | call commits: +1; ret commits: −1 |

Entries between LCP and TOS belong to calls still in flight. When a ret pops
below LCP, the popped entry is still committed state, and it stays in storage
until the ret commits. Both counts are 0..DEPTH (5 bits for 16 entries), so an
empty stack can be told apart from a one-entry stack.

### OLD_RS and exact undo

Every micro-op that leaves decode gets an entry in `rob_rs_track`. For a call,
the entry holds the return address it pushed. For a ret, it holds the address
it popped and whether a value was there (the hit flag). That value is OLD_RS.

On a misprediction, the host names the ROB index of the mispredicted micro-op
(`flush_idx`). The tracker then walks from the youngest entry back to it, one
entry per cycle, and each step undoes one operation:

- an annulled call pops the top;
- an annulled ret pushes its OLD_RS back.

Because the undo runs youngest first, each step exactly reverses one decode
step. When the walk ends, the stack holds what it held right after the
mispredicted branch. Slots above the top may have been overwritten by
wrong-path calls; every ret that popped such a slot has been annulled and has
written its value back. During the walk (`recovering`) decode is stalled and
no new flush is accepted. Commits of older micro-ops continue.

### Worked example

The block testbench replays this sequence and checks TOS, LCP and the top entry
after each step:

| Step | Event | TOS | LCP | Top |
|---|---|---|---|---|
| 1 | `call` pushes 0x10, `call` pushes 0x25; both commit | 2 | 2 | 0x25 |
| 2 | `ret` pops 0x25 (OLD_RS = 0x25), TOS drops | 1 | 2 | 0x10 |
| 2 | that ret commits, LCP drops | 1 | 1 | 0x10 |
| 3 | `call` pushes 0x26, then a `jz` is predicted | 2 | 1 | 0x26 |
| 4 | wrong path: `ret` pops 0x26 (OLD_RS 0x26), `call` pushes 0x27 | 2 | 1 | 0x27 |
| 5 | jz mispredicted: the 0x27 call is annulled (pop) | 1 | 1 | 0x10 |
| 6 | the ret is annulled: 0x26 is pushed back | 2 | 1 | 0x26 |
| – | the 0x26 call commits | 2 | 2 | 0x26 |

### Spill, fill and context switches

The in-processor stack is backed by a shadow stack in protected memory. Its
shadow stack pointer `ssp` counts entries written; `ssp_floor` is the thread's
base.

| Trigger | What happens | TOS / LCP |
|---|---|---|
| Overflow: a call finds all 16 entries used | the 4 oldest entries are written to memory | −4 |
| Underflow: a ret finds the stack empty and memory holds entries | up to 4 are read back under the current contents | + number read |
| `ctx_save` | every entry is spilled, in chunks | down to 0 |
| `ctx_restore` | refill until the stack is full or the shadow stack reaches its floor | up by the number read |
| `ctx_load` | loads the next thread's `ssp`/`ssp_floor` | unchanged |

A context switch therefore runs `ctx_save` → `ctx_load` → `ctx_restore`. A
switched-out thread keeps its return predictions instead of losing them.

Storage is circular. A spill or fill moves a base pointer and changes TOS/LCP
by the chunk. No entry is copied inside the array.

The controller starts a spill or fill **only when no call or ret is in
flight**. At that point TOS equals LCP, so only committed entries ever reach
memory, and no speculative state needs to be rolled back there. The call or
ret that needs the spill or fill is held at decode (`push_ready`/`pop_ready`
low) until the ROB has drained its older calls and rets. This costs some
cycles on deep recursion and keeps the design simple and safe.

A ret that finds both the stack and the shadow stack empty is let through with
no prediction (`uop_pred_valid` = 0). Its commit is reported as a return
violation.

### Ports

The array has two write ports and two read ports, as the original design
provisions:

- writes: a decode push or annul write-back; and a fill;
- reads: the prediction; and the spill.

Because of the quiescence rule above, this controller never uses both ports of
a pair in the same cycle. Synthesis may merge them.

## Commit-stage checks (full mode)

`commit_cfi_check` sees the oldest micro-op as it retires. Its class comes from
the tracker; the host supplies the label and the software-stack return
address. It has two rules:

1. A committed indirect call/jmp loads the commit-stage CFI_REG. The next
   committed micro-op must be a `cfi_lbl` with the same label. Otherwise
   `viol_cause` is `VIOL_FWD_NOLBL` or `VIOL_FWD_LABEL`.
2. A committed ret compares its OLD_RS with the return address read from the
   ordinary software stack (`commit_sw_ret`). A difference, or a ret that got
   no entry at decode, gives `VIOL_RET`.

`viol_valid` is combinational in the commit cycle, so the host can turn that
retirement into an exception. With `COMMIT_CHECK = 0` (base mode: only
speculation is constrained) nothing is reported.

## Interface and timing of `speccfi_top`

All logic runs on `clk` with a synchronous, active-low `rst_n`. Each path
handles one micro-op per cycle.

- **Decode in (`dec_valid`/`dec_uop`/`dec_ready`).** `dec_uop` holds:
  - the class: other, indirect call, indirect jmp, direct call, ret, `cfi_lbl`;
  - the label;
  - the next PC, which is a call's return address.

  `dec_btb_target` is the host BTB's prediction for the same micro-op.
- **Micro-ops out (`uop_*`, valid/ready).** Each carries:
  - the micro-op, or an lfence (`uop_fence`);
  - its ROB index `uop_rob_idx`;
  - `uop_pred_valid`/`uop_pred_target`: the RSB/SCS top for a ret, the BTB
    target for an indirect branch.

  The unit allocates an OLD_RS entry for exactly the micro-ops it hands out.
  The host ROB must allocate the same micro-ops, in the same order, with the
  same index. A call or ret is held while the RSB/SCS cannot take it.
- **Commit.** `commit_valid` retires the oldest entry. `commit_cls` shows its
  class. The host drives `commit_label` (for indirect branches and `cfi_lbl`)
  and `commit_sw_ret` (for rets) in the same cycle.
- **Recovery.** `flush_valid`/`flush_idx` are accepted when `flush_ready` is
  high. The named micro-op stays; everything younger is annulled, one entry per
  cycle, while `recovering` is high. The host must stop decoding the wrong path
  from the flush cycle on.
- **Shadow stack memory (`mem_req_*`, `mem_rsp_*`).**
  - requests use valid/ready, with a write flag;
  - addresses count entries (scale by 4 for byte addresses);
  - read data returns on `mem_rsp_valid`, one read outstanding.

  Memory protection is the host's responsibility.
- **Status pulses and counts.** `fence_event`, `check_pass_event`,
  `spill_event`, `fill_event`, `rsb_tos`, `rsb_lcp`, `rob_count`.

## Where this design departs from, or adds to, the original description

- **Commit width.** Decode and commit handle one micro-op per cycle, as on the
  32-bit in-order core used for the hardware estimate. The simulated
  out-of-order core commits up to six per cycle. That would need a
  multi-ported tracker, several LCP updates per cycle and a chained commit
  check. None of this is built.
- **LCP encoding.** LCP is a 5-bit count of committed entries rather than a
  4-bit index, so that "empty" can be represented. TOS is kept the same way.
- **Leaving the FENCE state.** The state diagram shows no edge out of FENCE.
  Here it returns to INITIAL once the lfence is taken. Flushes also reset the
  machine.
- **Spill/fill timing.** Spill and fill wait until no call or ret is in flight,
  and stall the triggering call or ret. The original text only says when they
  happen. It states that no prefetching or early spilling was explored; none is
  done here either.
- **Annulment rate.** The walk takes one entry per cycle.
- **LCP during a pop.** The original text says a decoded ret pops *without*
  changing LCP. One of its illustrations draws LCP already lowered after that
  pop. This design follows the text: LCP changes when the ret commits, which is
  the state the illustration shows.
- **The OLD_RS field.** It is a side array in step with the host ROB, rather
  than a column inside it. The ROB "speculative" bit is represented by an entry
  being present.
- **Context interface.** `ctx_save`/`ctx_load`/`ctx_restore` and the shadow
  stack pointer/floor pair are this design's own interface for the
  context-switch behaviour.
- **Empty-stack returns.** A ret that finds the stack empty is let through
  without a prediction.
- **Encodings.** The micro-op class encoding, the 32-bit address width and all
  handshakes are this design's choices.

### Not built

These are supplied by the host core and are not part of this RTL:

- the BTB and direction predictor;
- the decoder's instruction encodings for labelled `call`/`jmp` and `cfi_lbl`;
- the ROB itself;
- lfence execution (strict or load-only);
- exception delivery.

Also not built:

- the privileged instructions that let trusted code rewrite the shadow stack
  (for `setjmp`/`longjmp` and unwinding): only their existence is described;
- the protected memory holding the shadow stack, for which a behavioural model
  is provided for simulation.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_decode_cfi_check` | Random micro-op streams against a sequence model of where fences belong; stalls on both sides; flushes; the exact cycle cost (no gap on legal paths, two cycles per fence) |
| `tb_commit_cfi_check` | Random commit streams against a reference of both rules, in full and base mode |
| `tb_rsb_scs` | The worked example above; then random push/pop/commit/annul traffic against unbounded golden speculative and committed stacks, past overflow and underflow; then a save/switch/restore between two threads. The memory model answers with random ready and latency |
| `tb_rob_rs_track` | Allocation, in-order retirement and annulment walks against a queue model at 224 entries, including a full ROB |
| `tb_speccfi_top` | End to end at the default sizes (see below) |
| `tb_speccfi_attacks` | Directed attack scenarios at the default sizes, listed below |

`tb_speccfi_top` models the host core around the unit. It generates a legal
program of direct and indirect calls, returns and labelled indirect jumps.
Into it, it injects:

- conditional mispredictions with wrong paths full of calls and rets;
- poisoned BTB targets (a gadget with no `cfi_lbl`, or with a wrong label);
- hijacked committed indirect branches;
- corrupted software-stack return addresses;
- deep call and return phases;
- a context switch.

It checks that every correct-path return is predicted correctly, that fences
and violations appear exactly where expected, and that every mechanism
happened at least once: fence, label pass, annulled call, annulled ret, spill,
fill, context switch, both violation kinds.

`tb_speccfi_attacks` replays, as decoded micro-op streams, what each class of
published Spectre proof of concept shows the front end:

- **Spectre-BTB.** A poisoned target without a `cfi_lbl` is fenced before its
  first micro-op.
- **SMoTherSpectre.** A poisoned target whose `cfi_lbl` has another label is
  fenced between the `cfi_lbl` and the gadget's compare. When the victim and
  the gadget share one label, as under coarse-grained CFI, no fence is
  inserted. The protection is only as precise as the labels.
- **Spectre-RSB, overwritten return address.** The ret is predicted to the
  real call site, and its commit raises a return violation.
- **Spectre-RSB, speculative pollution.** Wrong-path calls and rets are
  undone, and the next correct ret is predicted correctly.
- **Spectre-RSB, cross address space.** An attacker thread overflows the
  RSB/SCS with gadget addresses. After the context switch back, the victim's
  rets are predicted from its own saved entries. An unmatched ret on empty
  stacks gets no prediction (no BTB fallback) and is reported at commit.

`tb/scs_mem_model.sv` is the behavioural shadow-stack memory used by the last
three testbenches.

To simulate with Verilator 5 (it needs `--timing` for the testbenches), run
from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_speccfi_top \
    -y rtl -y tb +libext+.sv -Irtl -Itb rtl/speccfi_pkg.sv tb/tb_speccfi_top.sv
./obj_dir/Vtb_speccfi_top
```

Replace the top-module name and testbench file to run another testbench. All
testbenches use `$urandom`; pass `+verilator+seed+<n>` to change the random
stream. The end-to-end test runs at the default parameters, with no overrides,
in well under a minute.
