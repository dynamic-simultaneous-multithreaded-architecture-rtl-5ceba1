# Dynamic Simultaneous Multithreading: thread-speculation control

A simultaneous multithreaded core can run several hardware threads, but an
ordinary sequential program gives it only one. This design adds the control
needed to create threads from that single program while it runs. Loops are
the source of the threads. When a loop is recognised, the control first runs
a couple of iterations normally, to learn:
- where the loop body starts;
- which registers advance by a constant stride;
- which registers carry values from one iteration to the next.

After that, every free hardware context is started on a later iteration,
with a copy of the register state and guessed values for the stride
registers. These iterations run speculatively, side by side. The oldest
iteration is the only non-speculative one and owns the precise state.

A speculative iteration may read a register or memory word before an older
iteration has written it. Marker bits catch this: a speculative read sets a
bit, and a later write by an older thread checks it. Such a late write
squashes the reader and every younger iteration, which then start again.
When the oldest iteration finishes, its successor receives its register
values and becomes the new oldest. The freed context starts the next
iteration. A loop that did not run faster this way is marked so that it is
not tried again.

The RTL covers the parts specific to this scheme:
- loop detection;
- thread creation and retirement;
- the multi-context register file with its speculation bits;
- stride prediction;
- memory dependence checking;
- fetch and memory-port selection.

The generic out-of-order core is outside the RTL: fetch, decode, queues,
reorder buffer, functional units and caches. Its signals appear as ports of
the top module.

## Execution modes

| Mode | Meaning |
|------|---------|
| non-DSMT | one context runs the program; loops are being looked for |
| pre-DSMT | a loop was found; the Head context runs two iterations alone to fill the stride table and the anchor bits |
| full-DSMT | free contexts are cloned with later iterations; each iteration is a thread |

Leaving the loop (the Head commits the loop branch not taken) squashes all
speculative contexts and returns to non-DSMT mode.

## Loop detection unit (`loop_detect`)

A branch target buffer of 256 sets × 2 ways (512 entries, LRU). Each entry
holds:
- the branch and target addresses;
- a 2-bit direction counter;
- a loop flag;
- the current and past iteration counts;
- a bad-loop bit.

The first taken backward branch records a loop. The second taken branch to
the same target reports it, one cycle later, with its start address and
branch address.

A loop is not reported in these cases:
- the unit is not in non-DSMT mode;
- the loop is marked bad;
- the loop stack vetoes it;
- the loop ran fewer iterations last time than there are free contexts.

The lookup port gives the fetch stage the usual prediction.

## Loop stack (`loop_stack`)

A 4-deep stack of nested loops. A newly detected loop is pushed if it lies
inside the top loop's address range or encloses it. A loop outside the nest
starts a new nest.

Each level keeps the SIPC value measured when it last ran speculatively. A
level is allowed when:
- its SIPC is not known yet; or
- it has the best SIPC of the nest.

## SIPC monitor (`sipc_monitor`)

This unit counts committed instructions and cycles separately for pre-DSMT
and full-DSMT execution of the current loop. When the loop ends it compares
the two IPCs by cross-multiplication:
- If full-DSMT IPC ≥ pre-DSMT IPC, the loop breaks even and is labelled good.
- Otherwise the loop is labelled bad.

The unit also outputs the full-DSMT IPC with four fractional bits, used as
the loop's SIPC. The label goes back into the BTB entry. The SIPC goes to
the loop stack.

## Thread Creation and Initiation Unit (`tciu`)

The TCIU holds the mode and thread bookkeeping:
- the M bit;
- the Continuation register (loop start);
- the D_Anchor and R_Anchor bits;
- one Join (J) bit per context;
- the Head and Tail ring pointers;
- an iteration number per context.

Each cycle it issues at most one command to the context file, in this
priority:

1. **Exit.** The Head left the loop: squash every speculative context.
2. **Squash.** A register or memory misspeculation was reported. The older
   of the two reports is taken. That context and all younger ones are
   squashed, and Tail moves back so that the iterations are cloned again.
3. **Join.** The Head's J bit is set and its buffered stores have drained:
   - the Head's R and D bits become the new anchor bits;
   - the stride table captures a new base;
   - the registers are transferred to the successor, which becomes Head.

   In pre-DSMT mode, or when no successor exists, the Head clears its bits
   and continues with the next iteration.
4. **Clone.** A free context exists in full-DSMT mode: start the iteration
   after Tail in it.

A J bit is set one cycle after a context commits the taken loop branch. A
speculative context whose J bit is set stops fetching and waits until it
becomes Head.

## Contexts (`context_file`)

Eight contexts in a ring. Each context holds:
- a PC;
- V (valid), S (speculative) and H (Head) bits;
- 64 registers of 32 bits;
- R, L and D bits per register.

| Bit | Meaning |
|-----|---------|
| R | a value was committed to the register in this context, or by an older instruction whose value this context has received |
| L | the register was read speculatively, before this context wrote it |
| D | the register was read with no value present and R_Anchor set, which marks an inter-iteration dependence |

A register read resolves in the same cycle:

- **Own copy.** The value comes from the reader's own context if:
  - R is set; or
  - the core says an instruction of the same context will write the
    register; or
  - the reader is the Head.
- **First level.** The register's D_Anchor bit is set, or its confidence
  counter is low. The read waits until the immediate predecessor has the
  value, then takes it. If that predecessor has already finished, the second
  level is used.
- **Second level.** The read takes the value from the nearest older context
  that has R set. If none has, it reads the Head's copy, which is the
  precise state.

Reads that go ahead speculatively set L. A commit write checks the L bits of
all younger contexts, including reads in the same cycle. The oldest context
found is reported for squashing.

A clone copies the Head's registers and then applies the stride predictions
as already-produced values (R set).

The transfer at a join works as follows:
- It copies every register the successor has not written itself.
- The successor also takes over the old Head's R bits. Without this, a
  context cloned before the old Head's last writes would find no writer and
  read a stale copy.
- Bulk operations are applied before the same cycle's commit writes, so
  those writes are not lost.

## Loop Stride Speculation Table (`lsst`)

There are 16 entries. Each entry holds a 2-bit confidence counter, an
opcode, a destination register, an immediate and a base value.

The Head's committed `addi rd, rd, #imm` instructions train the entries:
- A repeated immediate raises the confidence.
- A different immediate lowers it, and replaces the immediate once the
  confidence has reached zero.

At each join the table captures the Head's register values as the new base.
A clone that is d iterations beyond the base gets `rd = base + d·imm` for
every entry with confidence 2 or 3. The table is flushed when a new loop is
found.

## Register Read Confidence Table (`rrct`)

There is one 2-bit saturating counter per register, reset to 2:
- A register misspeculation on a register decrements its counter.
- A completed iteration increments the counter of every register it read
  speculatively.

A counter below 2 makes reads of that register wait for the predecessor, as
a set D_Anchor bit does. The paper gives each register a 2-bit confidence
counter for its speculative reads but not how the counters are trained or
used; the rule above is this design's own.

## Memory ports and dependence checking (`ls_select`, `mdrt`)

`ls_select` takes the oldest ready operation of each context's load/store
queue and fills the four data-cache ports:
- the Head goes first, then the other contexts in ring order;
- only the Head may send a store.

A speculative context commits its stores into its own queue. They drain
when the context becomes Head, and the context joins only after they have
drained.

The MDRT is a fully associative table of 64 entries. Each entry holds a
valid bit, a word address, a value, and one L and one S bit per context.
- Head loads pass without an entry.
- A speculative load allocates an entry, or sets its L bit in an existing
  one. When the table is full the load is refused and retried; the `mdrt`
  output shows this.
- A Head store sets its S bit. If any other context has L set for the
  word, the oldest such context is reported for squashing.
- Bits of joined or squashed contexts are cleared. An entry is freed when
  no L bit remains.

## Fetch scheduler (`icount_sched`)

This implements the ICount2.8-modified policy on two fetch ports of eight
instructions each:
- Port 0 serves the Head whenever the Head can fetch.
- The remaining ports go to speculative contexts in order of lowest ICount.
- Ties go to the older iteration.
- Contexts that are invalid, waiting on their J bit, or stalled are skipped.

## Top level (`dsmt_top`)

`dsmt_top` connects all of these units. Ports toward the core:

| Group | Signals |
|-------|---------|
| Branch commits per context | `br_*` |
| BTB lookup | `lk_*` |
| Head's committed addi | `addi_*` |
| Committed instructions per cycle | `commit_cnt` |
| Register reads and commit writes | `rd_*`, `wr_*` |
| Fetch | `icount`, `fetch_stall`, `fetch_*`, `pc_upd_*` |
| Load/store queues and buffered stores | `lsq_*`, `lsq_st_pending` |
| Data-cache ports | `dc_*` |

Status outputs report the mode, Head and Tail, the V/S/J bits, squashes,
clones, joins, misspeculations, MDRT-full and the loop label.

An iteration ends when a context commits the taken loop branch. Only grants
for memory operations that the MDRT accepted are returned to the queues.

The MDRT clears a context's bits after its squash check, not before. This
keeps the clear mask (derived from the squash decision) from feeding back
into that check combinationally.

## Parameters

| Parameter | Default | Origin |
|-----------|---------|--------|
| contexts `N` | 8 | largest configuration evaluated (2, 4, 8) |
| registers per context | 64 | context diagram, Register 0..63 |
| fetch ports × width | 2 × 8 | ICount2.8 |
| data-cache ports | 4 | evaluation section |
| BTB | 256 sets × 2 ways | "2KB 2-way" |
| pre-DSMT iterations | 2 | "a couple of loop iterations" |
| LSST entries | 16 | this design |
| MDRT entries | 64 | this design |
| loop stack depth | 4 | this design |
| data/address width | 32 | this design |

The per-context queue and buffer sizes belong to the core. The package
records them: 64-entry instruction queue, 64-entry load/store queue and
32-entry reorder buffer.

## Not included

The generic superscalar core is not implemented:
- caches and main memory;
- fetch unit;
- instruction queues;
- decode/rename/dispatch;
- reorder buffers;
- reservation stations;
- functional units;
- load/store queues.

The paper gives only their names and sizes. Parts of the good/bad criteria
are also left out: thread run-length and the exact SIPC formula are not
specified, so SIPC here is the full-DSMT IPC.

## Verification

Each unit has a self-checking testbench in `tb/`:
- directed cases for each unit;
- random stimulus against a reference model where the unit is mostly
  combinational (scheduler, port selection, confidence table, MDRT).

`tb_dsmt_top` runs the top at its default size. It acts as the core and
runs a 60-iteration loop with four parts:
- an induction variable;
- a running sum that depends on every iteration;
- a rarely written counter;
- a burst of loads and a store that the next iteration loads.

The steps of the overlapping iterations are interleaved at random. The
final register values must equal the sequential result. The test also
counts each mechanism and fails if one never occurs:
- loop detection and full-DSMT mode;
- clones and joins;
- J-bit waits;
- dependence waits;
- register and memory squashes;
- a full MDRT;
- dual fetch and BTB hits;
- the loop label.

`tb_dsmt_kernels` runs three loops in the shape of Livermore kernels 1, 3
and 5 back to back, with a memory model:
- kernel 1 (hydro fragment): independent iterations;
- kernel 3 (inner product): a sum carried in a register;
- kernel 5 (tri-diagonal elimination): a value carried through memory, so
  early speculative loads must be squashed.

The loop bodies are reduced to their data dependences. The memory arrays and
the sum must match a sequential execution, and each loop must be detected,
run in full-DSMT mode and labelled when it exits.

Both end-to-end testbenches run the top at its default size. The other
configurations (2 or 4 contexts) are reached through the parameter `N`; the
context file and TCIU testbenches run at 4 contexts.

To simulate a testbench with Verilator:

    verilator --binary --timing --assert --top-module tb_dsmt_top -Irtl -Itb \
        -y rtl -y tb rtl/dsmt_pkg.sv tb/tb_dsmt_top.sv
    ./obj_dir/Vtb_dsmt_top

Each testbench ends by printing `TB_RESULT checks=<n> failures=<m>`.
