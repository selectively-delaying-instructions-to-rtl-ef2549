# Delay-on-Squash: stopping microarchitectural replay in an out-of-order core

A side channel (cache timing, port contention, ...) usually leaks too little
in one run to be useful; an attacker needs to repeat it many times. A
*microarchitectural replay attack* gets those repetitions without re-running
the victim. It picks an instruction that will misspeculate, the **handle**,
and makes it squash and re-execute the same younger code again and again.
The best-known example makes a load in an enclave page-fault over and over
under a malicious OS. Each time, the instructions after the load run
speculatively, leak, and are squashed. The code being replayed can be on the
*correct* path and can be fed non-speculative data. So defences that track
data from speculative loads do not stop it.

Delay-on-Squash needs no knowledge of which instructions leak. It relies on a
plain fact: a replay shows up as an instruction that **issued, was squashed,
and is back in the ROB while the handles in front of it are still
unresolved**. Such an instruction is not allowed to issue speculatively a
second time. It waits until those handles are safe, or until it is the
oldest unresolved instruction. One speculative run of the side channel is
allowed. The threat model assumes one run leaks nothing useful, and this
unit does not defend against leaks that need only one run.

This repository holds synthesizable SystemVerilog for the unit that sits
beside an out-of-order core and makes that decision at issue. It also holds
self-checking testbenches, including an end-to-end test against a small core
model. The test replays the original single-handle attack, a nested-handle
attack, and the page-fault attack with the operating system running between
replays.

## How a replay is recognised

Two things are tracked.

1. **Which instructions are potential handles, and when they become safe.**
   These are the instructions that can cause a squash: branches, loads that
   may fault, stores with unknown addresses, and memory-order speculation.
   They enter the *handle queue* at dispatch, in program order.
2. **Which instructions were squashed after issuing.** At each squash, the
   PCs of the squashed instructions that had issued are recorded. The record
   is tied to the youngest handle in the handle queue at that moment.

An issue candidate is delayed when its PC is in a live record and an older,
non-squashed handle is still in the queue. A record dies when the handle it
is tied to leaves the queue. Handles leave only from the head, so by then
every handle that was in flight at the squash has become safe.

Why the youngest handle and not the one that misspeculated? Take a nested
attack. Outer handle H1 replays inner handle H2, and H2 replays the side
channel S. If the record of S were tied to H2, then squashing H2 through H1
would release S, and the pair would multiply the replays. Tying it to the
youngest handle, together with in-order removal, keeps S blocked until H1
itself is safe. The same in-order removal stops *serial* handles, which are
used one after another.

Exact sets of PCs would need large CAMs. So the records are kept in Bloom
filters. A Bloom filter can give false positives, which only cost
performance. It never gives false negatives, which would be a security hole.

## The handle queue (`handle_queue`)

The handle queue is a circular FIFO of `P_DEPTH` entries. Each entry holds a
sequence number, a *resolved* bit and a *squashed* bit.

- **Enqueue.** Up to 8 handles per cycle, packed in port order. `enq_ready`
  drops when fewer than 8 entries are free, and dispatch then stalls.
- **Resolve.** Up to 8 reports per cycle, each matched by sequence number.
  The core sends a report when an instruction stops casting its speculative
  shadow: a branch resolved, a load past its fault check, a store address
  known, and so on. How the core detects this is outside the unit.
- **Squash.** Every entry younger than `sq_seq` is marked squashed. Squashed
  entries **stay in place**. They leave only when they reach the head.
- **Remove.** Each cycle, up to 8 consecutive head entries leave if they are
  resolved or squashed. A resolved handle behind an unresolved one stays
  unsafe.

The queue also reports:

- `pop_mask`: which entries leave this cycle.
- `young_slot`: the youngest entry that survives this cycle.
- `live_after_sq`: whether any non-squashed entry survives this cycle's
  squash.
- `oldest_seq`: the sequence number of the oldest non-squashed entry. The
  issue decision uses it.

## Two rolling Bloom filters (`filter_ctrl`, `bloom_filter`)

This is the part that needs the most care.

**The filters.** Each filter is 64 bits with two hash functions. Insertion
ORs a whole mask in one cycle. The only way to forget is to clear the whole
filter. A query hits when both hashed bits are set. An issue candidate is
checked against *every* filter.

**One active filter.** A single filter shared by all squashes would be
re-tied to an ever younger handle on every squash, so it might never clear.
There are therefore `P_NF` = 2 filters used in turn. Exactly one is
*active*. On a squash that removes at least one issued instruction, the
controller does this:

1. If the active filter holds more than `P_SAT` = 32 ones (more than half
   full), and the next filter is empty and not tied to any handle, the next
   filter becomes active (`ev_switch`).
2. The squashed instructions' hash bits are ORed into the (possibly new)
   active filter.
3. That filter is tied to the youngest entry of the handle queue. This
   replaces any previous tie. The youngest entry may be one that this very
   squash removes.

An inactive filter keeps its tie and only waits to be cleared.

**Clearing.** When the entry a filter is tied to leaves the handle queue,
the filter is bulk-cleared (`ev_clear`). This rule has two exceptions:

- If the filter is re-tied by a squash in that same cycle, it is not
  cleared.
- The deferred case below.

**The deferred case.** Suppose that after a squash no non-squashed handle
is left in the queue. Every handle was either squashed or already safe. The
squashed handles drain from the queue almost at once and would clear the
filter. But they are about to be dispatched again as new dynamic
instructions. The single-handle page-fault attack is exactly this case: the
faulting load is itself squashed on every replay.

Such a filter is marked *deferred* (`ev_defer`). When its handle leaves, or
at once if the queue was empty, the filter starts counting dispatched
instructions. It is cleared only after **more than one ROB's worth**
(`P_WINDOW` = 192) has been dispatched. At that point at least one
instruction dispatched after the count started has left the ROB, so no
handle from before the count can still be in flight.

**Every squash restarts every waiting count.** This rule is essential.
Without it, a filter that switched to inactive during a long attack would
run out its count while the attack was still going. Its side-channel PCs
would then be forgotten. The end-to-end test caught exactly that failure
before the rule was added.

**Context switches.** The filters belong to the code that is running. An
attacker-controlled operating system runs between the replays of a
page-fault attack. If its instructions went through the same filters, they
would run out the enclave's deferred count, and the side channel would be
replayed after every fault. So the filters are swapped with the context:

- `ctx_bits` always shows the contents of every filter, and `active` shows
  which one is active. The context-switch logic stores these with the rest
  of the context.
- A one-cycle `ctx_load` writes a stored set back. It goes through each
  filter's clear-and-insert path. Loading all zeroes gives a new context
  clean filters.
- Handle ties are not stored, because the context's handles are gone from
  the pipeline after a switch. Every non-empty filter that is reloaded
  therefore starts a deferred count of one window, exactly like the
  no-live-handle case above.
- `ctx_load` is allowed only with the pipeline drained, with no squash or
  dispatch in that cycle. An assertion checks this.

Keeping the stored copy secret and intact, for example by encrypting it, is
the job of whatever stores the context. It is not part of this unit.

**Ports.** `bloom_filter` has one query port per issue slot and reports its
population count. `filter_ctrl` reports the active filter, each filter's
fill level, and the switch, clear and defer events.

## Hashes and the squash insertion (`pc_hash`, `squash_tag_store`)

The hashes of each PC are computed once, at dispatch, by `pc_hash`. Each
hash is an H3 hash: index bit *b* of hash *k* is the parity of
`pc & M[k][b]`. The masks are fixed 64-bit constants. `dos_pkg::h3_mask`
generates them: a xorshift64 generator (shifts 13, 7, 17, eight rounds) is
seeded with `0x9E3779B97F4A7C15 * (64k + b + 1)`.

`squash_tag_store` keeps, for each ROB entry:

- the two 6-bit indices;
- the sequence number;
- an *issued* flag.

On a squash, every ROB entry is scanned in parallel. The union of the index
bits of the squashed entries that had issued becomes the insertion mask, in
the squash cycle itself. A real core could spread this over its
squash-recovery cycles. Entries that never issued are not inserted. This
includes instructions that were delayed, which is how a blocked replay stays
blocked without growing the filter.

## The issue decision (`issue_gate`)

For each of the 8 issue candidates:

```
delay = enable & valid & hit_in_any_filter & oldest_handle_valid
        & (candidate is younger than the oldest non-squashed handle)
go    = valid & ~delay
```

The oldest unresolved instruction is never delayed, so the core always makes
forward progress. A delayed instruction retries on later cycles. `enable`
lets the core turn the protection on only while enclave code runs.

## Interface and timing (`dos_top`)

All updates take effect at the rising edge of `clk`. `rst_n` is an
asynchronous active-low reset that empties everything. The issue decision
is combinational on the current state.

| group    | ports | meaning |
|----------|-------|---------|
| dispatch | `disp_valid[8]`, `disp_rob[8]`, `disp_seq[8]`, `disp_pc[8]`, `disp_handle[8]`; out `disp_ready` | New instructions. `disp_handle` marks the ones that can cause a squash. Hold dispatch while `disp_ready` is low. |
| issue    | `iss_valid[8]`, `iss_rob[8]`; out `iss_delay[8]`, `iss_go[8]` | Candidates, by ROB index. A candidate with `iss_go` high is taken as issued in that cycle. |
| commit   | `cmt_valid[8]`, `cmt_rob[8]` | Frees the entry's stored hashes. |
| resolve  | `res_valid[8]`, `res_seq[8]` | A handle's shadow has lifted. |
| squash   | `sq_valid`, `sq_seq` | Everything *younger* than `sq_seq` is removed. If the faulting instruction itself goes too, pass its predecessor's number. |
| context  | `ctx_load`, `ctx_bits_in[2][64]`, `ctx_active_in`; out `ctx_bits[2][64]` | Read out and reload the filters at a context switch, with the pipeline drained. |
| status   | `active`, `bf_count[2]`, `hq_count`, `sq_issued`, `ev_switch`, `ev_clear[2]`, `ev_defer` | Observation and event counting. |

The core must follow these rules:

- Sequence numbers increase by one per dispatched instruction and are
  **never reused after a squash**. They are compared modulo 2^32.
- The core does not dispatch in a squash cycle. An assertion checks this.
- Every candidate that is not delayed is issued.

## Parameters

| parameter | default | origin |
|-----------|---------|--------|
| issue / dispatch / commit width `P_W` | 8 | the evaluated machine |
| filters `P_NF` | 2 | the evaluated configuration; at least 2, used in a cycle (3 and 4 elaborate cleanly but are not simulated) |
| bits per filter `P_BITS` | 64 | the evaluated configuration |
| hashes per filter `P_NUM_HASH` | 2 | the evaluated configuration |
| saturation threshold `P_SAT` | `P_BITS/2` | "more than half full" in the source's worked example |
| ROB entries `P_ROB`, deferred window `P_WINDOW` | 192 | chosen (a common default ROB size) |
| handle queue depth `P_HQ` | 192 | chosen: as deep as the ROB |
| PC width / sequence width | 64 / 32 | chosen |

Synthesized at the defaults, the unit has about 15.7k flip-flops. Most of
them are the per-ROB sequence numbers and hash indices (192 × 46 bits) and
the handle queue (192 × 34 bits). Storing ROB indices with a wrap bit
instead of 32-bit sequence numbers would shrink both.

## Where this RTL goes beyond, or departs from, the published description

- **Chosen, not taken from the source:**
  - the hash family;
  - ROB and handle-queue sizes;
  - port counts for removal and resolve;
  - sequence numbers instead of ROB indices for age.
- **Deferred window:**
  - It is measured in dispatched instructions.
  - It must be *exceeded*, not just reached.
  - It restarts on every squash.

  The source only says the clearing is delayed "by the length of the
  instruction window". The restart is needed to keep the self-squashing
  single-handle attack blocked.
- **Switching rule:** switch on saturation, and only into an empty filter.
  The source mentions both "switch as soon as the other filter is cleared"
  and a saturation check. The saturation check, as in its worked example, is
  what is built.
- **Not included:** the core itself; the detection of when each kind of
  shadow ends; the protected storage of a context's filters while another
  context runs, for which only the read-out and reload ports are built; and
  any notification to software when an attack slows execution. The source
  asks for these last two but does not describe them.
- **Context reload:** the reloaded filters wait one window before clearing.
  The source asks only that the filters be stored and reloaded.

## Files

| file | content |
|------|---------|
| `rtl/dos_pkg.sv` | sizes and the hash-mask generator |
| `rtl/pc_hash.sv` | H3 hashes of a PC |
| `rtl/bloom_filter.sv` | one binary Bloom filter |
| `rtl/handle_queue.sv` | the handle FIFO |
| `rtl/squash_tag_store.sv` | per-ROB-entry hashes and the squash insertion mask |
| `rtl/filter_ctrl.sv` | the rolling filters and their handle ties |
| `rtl/issue_gate.sv` | the issue decision |
| `rtl/dos_top.sv` | the unit |
| `tb/*_tb.sv` | one self-checking testbench per module |
| `tb/dos_fig4_tb.sv` | the six-step worked example, on a small unit |

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself
through a watchdog. Run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/dos_pkg.sv \
          tb/dos_top_tb.sv --top-module dos_top_tb -Mdir obj -o sim && obj/sim
```

For another module, replace `dos_top_tb` with its testbench name.

- `pc_hash_tb`: compares against an independent bit-by-bit H3 reference.
  It also checks that 4096 PCs spread over all 64 positions and that the two
  hashes rarely agree.
- `bloom_filter_tb`: random inserts, clears and 8-port queries against a
  reference bit vector.
- `handle_queue_tb`: random enqueue, resolve and squash against a reference
  FIFO, at 12 entries and 8-bit wrapping sequence numbers. It also checks
  dispatch stalls and squashed entries waiting behind an unresolved head.
- `squash_tag_store_tb`: random dispatch, issue, commit and squash against
  reference entries, including squashed instructions that never issued.
- `filter_ctrl_tb`: a hand-worked sequence covering:
  - insertion and tying;
  - the saturation switch;
  - clears by each filter's own handle;
  - deferred clears with and without a handle;
  - the restart on squash;
  - no switch into a busy filter;
  - empty squashes;
  - re-tying in the cycle the old handle leaves;
  - reading out, replacing and reloading the filters at a context switch.

  A random phase of 3000 cycles follows. It mixes squashes, pops,
  dispatches, queries and reloads, and compares every output on every cycle
  with a reference model of the same rules.
- `issue_gate_tb`: random and directed cases, including sequence-number
  wrap.
- `dos_top_tb`: runs at the full default size with a behavioural 8-wide
  out-of-order core. Its phases:
  1. A page-faulting load at the ROB head is replayed 6 times. With the unit
     on, the two side-channel instructions issue exactly once before
     release. With it off, they issue 7 times.
  2. A nested attack: an outer handle replays an inner handle, which
     replays the side channel. The side channel again issues once. The
     squashed handles fill the handle queue until dispatch stalls.
  3. 5000 instructions with 20% branches, 30% of them mispredicted.
  4. The page-fault attack again, but this time the faulting load squashes
     itself, and 400 operating-system instructions run before each replay.
     When the filters are stored, replaced by a clean set and reloaded, the
     side channel issues once in 6 replays, and the operating system is
     never delayed. When the operating system shares the filters, the side
     channel issues on all 7 runs.

  Throughout, `dos_top_tb` keeps an exact (non-Bloom) record of the
  squashed PCs and their handles. Any instruction from a live record that
  issues under an unsafe handle is a failure. Every program must commit
  completely. The test also fails if any mechanism never occurs: delay,
  insertion, switch, clear, deferred clear, handle-queue stall, or context
  reload. A typical
  run sees about 30k delays, 80 switches, 184 clears and 24 deferrals. It
  finishes in well under a second.
- `dos_fig4_tb`: the worked example of the mechanism, step by step. It uses
  an 8-entry ROB, 4-wide dispatch and issue, and two 8-bit filters. The
  steps are:
  1. H1 X H2 S S H3 are dispatched.
  2. H2 squashes S S H3 into filter A.
  3. On the new path, S S H3 are delayed but Y issues.
  4. H1 squashes X H2 Y. Filter A is more than half full, so the unit
     switches to filter B.
  5. Two more replays by H1 issue nothing.
  6. H1 resolves, the squashed handles drain, both filters clear, and
     everything issues.

  At the start it picks PCs so that the example's hit pattern and switch
  really occur with the real hashes.

The testbenches check behaviour and protection. They do not measure
performance on real programs. Such an evaluation needs a full core model
running real benchmarks.
