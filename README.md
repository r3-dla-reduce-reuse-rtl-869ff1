# R3-DLA support logic in SystemVerilog

Decoupled look-ahead (DLA) runs a program twice, on two cores. One core runs
the **main thread (MT)**, which is the real program. The other core runs the
**look-ahead thread (LT)**, a cut-down "skeleton" of the same binary. The
skeleton keeps only the branches, the address computations that feed
delinquent loads, and whatever those depend on. Because LT has less to do, it
runs ahead of MT. It hands MT its branch outcomes and cache-miss hints before
MT needs them. MT then fetches down the right path and finds its data already
in the shared caches.

R3-DLA ("Reduce, Reuse, Recycle") makes this cheaper and faster in three ways:

* **Reduce.** Simple strided loads and their loops are dropped from the
  skeleton. A small stride state machine (T1) on the main core prefetches for
  them instead.
* **Reuse.** LT has already computed most results. For instructions that are
  slow in MT, LT sends the value across, and MT uses it as a value prediction.
  An ALU instruction whose inputs are all predicted does not even need to be
  re-executed to validate its own prediction.
* **Recycle.** Several skeleton versions are compiled into the binary. A
  controller tries each version on each hot loop, measures MT's IPC, and
  remembers the best version per loop.

This repository holds RTL for the logic that is new in such a system: the
queues between the cores, the LT and MT ends of those queues, skeleton
masking, value reuse, T1, the recycle controller and the rule that keeps LT's
writes out of memory. The two out-of-order cores, their caches, the branch
predictors and the L2/L3 are not included. `r3dla_top` brings out their
signals as ports, grouped by core (`lt_*` and `mt_*`).

## Block map

```
 look-ahead core (LT)                                   main core (MT)
 ─────────────────────                                  ──────────────
 I-cache miss ─► mask_fetch_ctrl ─► side bits           I-cache miss ─► mask_fetch_ctrl
 fetch group ─► skeleton_mask_decoder (delete)          fetch group ─► skeleton_mask_decoder (S bits)
                                                                       │
 commit ──────► lt_hint_writer ──► boq (512 x 2b) ──► mt_hint_ctrl ──► fetch_buffer (32)
   ▲   miss hints ─┘   │           fq  (128 x 64b) ─►    │  │  │           │ decode
   │                   └── sif lookup ◄── sif ◄──────────┼──┼──┼── execute latency (training)
   │                                                     │  │  └─► vpt (32) ─► vp_scoreboard
   │                                                     │  └────► released prefetches
   │                                                     └───────► indirect target hints
 registers ◄──────── reboot_ctrl (copies MT's registers through the FQ)
 dirty evictions ──► spec_containment (discard)         S-marked loads ─► t1_prefetcher
                                                        loop branches ──► recycle_ctrl ─► skeleton id
```

`r3dla_pkg` holds the shared widths and types. Every module has exactly one
job, and each file opens with a comment on its function, timing and interface.

## Keeping two threads in step: BOQ, FQ and footnotes

This is the part that is hardest to get right, because the two queues carry
different things at different rates.

**Branch Outcome Queue (`boq`).** It holds 512 entries of 2 bits:
`{taken, footnote}`. `lt_hint_writer` pushes one entry per conditional branch
that LT commits. `mt_hint_ctrl` pops one entry each time MT's fetch unit meets
a conditional branch.

* MT does not use its own predictor for these branches. It takes the
  direction from the BOQ head.
* If the BOQ is empty, `br_grant` stays low and MT's fetch stalls. This is
  counted as `stat_fetch_stalls`.
* If the BOQ is full, LT's commit is held. This is what stops LT from running
  more than 512 branches ahead.

**Footnote Queue (`fq`).** It holds 128 entries with a 64-bit payload each,
plus a kind, a tag and an offset. It carries the less frequent but wider
information:

* L1, L2 and TLB prefetch addresses;
* indirect-branch targets;
* value-reuse entries;
* during a reboot, the register file.

**Sequence tags.** FQ entries have to be attached to a point in the branch
stream, and that is done with tags.

* The BOQ counts pushes with a 10-bit counter. One bit wider than the index,
  this counter is the sequence tag of each entry.
* When LT produces a hint, the writer sets the footnote bit of the *most
  recent* BOQ entry. It then pushes the hint into the FQ with that entry's tag.
* When MT pops a branch whose footnote bit is set, `mt_hint_ctrl` enters a
  DRAIN state. It pops FQ entries carrying that tag, one per cycle, and acts
  on each one by its kind:
  * a prefetch is released on `fn_pf_*` at that moment ("just in time": the
    prefetch is issued when MT reaches that point in the program, not when LT
    got there);
  * an indirect target is latched and given, once, to the next indirect
    branch MT fetches;
  * a value goes into the value prediction table.
* An FQ head with an older tag is discarded. A newer one ends DRAIN.
* No new branch direction is granted during DRAIN. So a hint is always in
  place before MT fetches the instructions after its branch.

**Dropping.** Hints are only hints, so dropping one is always safe. The writer
drops a hint in two cases, and `stat_hints_dropped` counts both:

* the FQ is full;
* MT has already consumed the branch the hint would attach to. This shows up
  as the footnote set not being acknowledged (`set_fn_ack`). It happens when
  that BOQ entry is popped in the same cycle.

The FQ has one write port. When a miss hint and a value entry meet in the same
cycle, the hint goes first and LT's commit waits one cycle.

## Reuse: value entries, the VPT and skipped validations

**Which values are sent.** The Slow Instruction Filter (`sif`) decides this.
It is a 1024-bit bloom filter with two hash functions.

* When the recycle controller reports a new loop, the filter is cleared and
  a training window of 8 loop iterations starts.
* During training, every MT instruction whose dispatch-to-execute latency is
  at least 20 cycles is inserted.
* LT looks up each instruction it commits. On a hit, it sends the result
  through the FQ.
* A value that turns out wrong in MT deletes its PC from the filter. This
  clears both of its bits, so it can also remove other PCs. That is accepted:
  the confidence scheme is meant to be crude.

**How MT finds its value.** Each value entry carries two things:

* the tag of the last branch before the instruction;
* an offset: the PC difference to that branch, in instructions, 6 bits wide.

On the MT side, each fetched instruction is tagged the same way before it
enters the 32-entry fetch buffer. The tag is the tag of the last granted
branch (`br_seq`). The offset is computed from the PC of that branch.

**Matching at decode.** `vpt` is a 32-entry FIFO and is read in order. For
each decode slot, in program order, the slot hits if the FIFO head has the
slot's tag and offset. The head then advances, so up to 4 entries can be
consumed per cycle. If the head belongs to a branch older than anything now
decoding, its instruction has gone by without using it. This happens when a
value arrives late, and the entry is dropped. `stat_vp_hits` counts hits.

**Skipping validation.** Normally an instruction with a predicted value still
executes, to check the prediction. `vp_scoreboard` keeps one bit per
architectural register, meaning "holds a predicted value". The rules:

* An ALU instruction with a prediction sets its destination's bit.
* Any other writer clears its destination's bit. "Any other writer" means
  loads, and instructions without a prediction.
* An ALU instruction with a prediction whose used sources are all marked does
  not need to run. Its inputs are already covered by other checks.
* Slots of the same decode group see the marks of the older slots.

If an input was in fact wrong, its own validation fails and replays
everything after it.

## Reboot

When MT resolves a branch against the BOQ's direction and the two disagree,
LT went off the right path. `reboot_ctrl` then does four things:

1. It flushes both queues and the hint state.
2. It walks MT's 64 architectural registers. It pushes one per cycle through
   the FQ and pops them on the other side into LT's register file.
3. It restarts LT at MT's PC, no earlier than 64 cycles after the mismatch.

While it runs, the reboot controller owns the FQ, and the hint writer and
hint controller are held. Copying 64 registers takes about 66 cycles, so in
practice the copy sets the length of the reboot, not the 64-cycle floor.

## Skeleton masks

The skeleton is not a second binary. It is a set of side bits per instruction
(8 bits per 4-byte instruction):

* bits 0–5 say which of the six skeleton versions contain it;
* bit 6 is the **S bit**, which marks T1's loop branches and strided loads.

The side bits are stored apart from the code. On an I-cache miss,
`mask_fetch_ctrl` issues two L2 reads:

* the line itself, at address A;
* its side bits, at `MASK_BASE + (A >> 6) * 16`.

The mask read can return later. Until it does, the line's mask counts as all
ones, which keeps every instruction and is always safe.
`skeleton_mask_decoder` works differently on the two cores:

* on LT, it deletes the instructions that are not in the current version and
  packs the survivors into the fetch group;
* on MT, it deletes nothing and only reports S bits.

## T1: stride prefetching without the skeleton

`t1_prefetcher` has 16 entries, each with these fields:

* state;
* loop PC, instruction PC;
* last effective address, stride;
* time of the last instance, prefetch distance;
* two bookkeeping fields: the last prefetched address, and how far ahead it
  is.

Each S-marked load moves its entry through four states:

| State | Entered on | Action |
|---|---|---|
| INVALID | – | none |
| FIRST | first instance | remember the address |
| STRIDE | second instance | learn δ; prefetch 4 strides ahead |
| STEADY | third instance | measure the iteration time T |

In STEADY, the distance is `n = ceil(avg_mem_lat / T)`, clamped to 1..64. The
entry catches up to n strides ahead. After that it issues exactly one new
prefetch, `A + nδ`, per iteration. A changed stride sends the entry back to
STRIDE. When the S-marked loop branch falls through, the loop has ended and
every entry is cleared.

Only one prefetch leaves per cycle. With several entries catching up at once,
the lowest entry goes first and the others follow over the next iterations.

## Recycle: choosing a skeleton per loop

`recycle_ctrl` watches MT's committed loop branches. A branch with a new PC
starts a new loop. It also pulses `new_loop`, which clears the SIF and starts
its training, and it looks the PC up in the 16-entry Loop-Config Table (LCT).

* **LCT hit.** The stored version is used at once.
* **LCT miss.** A search runs over versions 0 to 5. Each version gets a
  window that ends once the loop has run more than `LOOP_THRESH` (8)
  iterations *and* at least 10,000 instructions have committed.
  * At the end of each window, the window's IPC is computed in fixed point
    (instructions × 256 / cycles) and compared with the best so far.
  * After the sixth window, the best version is written into the LCT, with
    round-robin replacement, and stays in use.

## Speculation containment

LT runs speculatively and must never change memory. `spec_containment` sits
at the LT core's private cache:

* a dirty line evicted in look-ahead mode is dropped, not written back;
* a snoop that finds a dirty line in look-ahead mode is answered without
  data.

Outside look-ahead mode the cache behaves normally.

## Top-level interface and timing

`r3dla_top` has two parameters: `FETCH_W = 4` and `LINES = 512` (a 32 KB
I-cache with 64 B lines). Its ports come in groups:

* LT fetch and mask fetch;
* LT commit and hints;
* LT cache containment;
* LT register write port and restart;
* MT branch directions, indirect targets and branch resolution;
* MT fetch, decode and execute;
* MT commit;
* released FQ prefetches and T1 prefetches;
* statistics counters.

Timing conventions:

* All state changes at `posedge clk`.
* Reset is synchronous and active-low (`rst_n`).
* Grants and lookups are combinational from registered state and the current
  request. For example, `mt_br_grant` and `mt_br_taken` answer `mt_br_req` in
  the same cycle, and `mt_dec_vp_hit` answers the decode slots in the same
  cycle.
* An MT fetch group is assumed to end at its conditional branch and to lie in
  one I-cache line. The group is pushed in the same cycle as the branch's
  direction is granted.

## Parameters

| Parameter | Default | Where |
|---|---|---|
| BOQ depth | 512 | `boq.DEPTH` |
| FQ depth | 128 × 64-bit payload | `fq.DEPTH` |
| Fetch buffer | 32 entries, 4 in / 4 out | `fetch_buffer` |
| Value prediction table | 32 entries, 4 lookups per cycle | `vpt` |
| SIF | 1024 bits, 8 training iterations, 20-cycle threshold | `sif` |
| T1 | 16 entries, degree 4, max distance 64 | `t1_prefetcher` |
| LCT | 16 entries, 6 versions, 10,000 instructions per window, 8 iterations | `recycle_ctrl` |
| Reboot | 64 registers, at least 64 cycles | `reboot_ctrl` |

The following numbers are this design's own choices:

* the 1024-bit filter size;
* the T1 degree (4) and maximum distance (64);
* the 8-iteration loop threshold;
* the mask address function;
* the 10-bit tags and 6-bit offsets.

## Where this departs from the published design

* **Fetch-buffer entries.** They are wider than 64 bits. Each entry holds the
  instruction, its PC, the S bit, the tag and the offset, because value
  matching at decode needs those. The depth of 32 is kept.
* **Value offsets.** The offset counts instructions by PC difference from the
  preceding conditional branch. This assumes 4-byte instructions, and offsets
  wrap at 64 instructions.
* **One hint per cycle.** The design moves one FQ entry per cycle in each
  direction, and serves one conditional branch and one indirect branch per
  fetch cycle.
* **Indirect targets.** A target hint is used once, by the next indirect
  branch MT fetches. It is not keyed by PC.
* **Mask fetch.** Only one mask read may wait for the L2 port. A mask that
  returns for a line that has been refilled again since is not detected.
* **T1 entry size.** An entry keeps full 64-bit PCs, address and stride, so
  it is about 352 bits. The published budget is 512 B for 16 entries (256 bits
  each), which implies shorter tags.
* **Reboot length.** At 64 registers, the copy itself takes longer than the
  64-cycle minimum.
* **Not built.** The cores, the caches, the baseline prefetcher, the branch
  predictor and the offline skeleton generator. The top's ports stand in for
  them.

## Simulating

All files are plain SystemVerilog. Any testbench builds with Verilator 5;
`tb_r3dla_top` is one example:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_r3dla_top \
    rtl/r3dla_pkg.sv tb/tb_r3dla_top.sv -y rtl -y tb -o sim
./obj_dir/sim
```

Each testbench checks its block against a model written in the testbench
itself. It ends by printing `TB_RESULT checks=<n> failures=<n>`. A watchdog
counts a failure if a test hangs.

**The block testbenches:**

* `tb_boq` and `tb_fq`: queue models.
* `tb_lt_hint_writer` and `tb_mt_hint_ctrl`: footnote protocol, drops,
  drain.
* `tb_reboot_ctrl`: register copy, and a length of 64 to 80 cycles.
* `tb_skeleton_mask_decoder`: deletion and packing.
* `tb_mask_fetch_ctrl`: two reads per miss, late masks.
* `tb_t1_prefetcher`: 4 prefetches after learning the stride, then exactly
  `ceil(200/12) = 17` strides ahead, one per iteration.
* `tb_sif`, `tb_vpt`, `tb_vp_scoreboard` (including the published
  five-instruction example), `tb_fetch_buffer`, `tb_recycle_ctrl` and
  `tb_spec_containment`.

`tb_r3dla_top` runs the whole top at its default sizes, with nothing
overridden, in about ten seconds. The testbench models a loop run by both
threads:

* LT commits the loop and emits prefetch and indirect-target hints.
* MT fetches it, taking every branch direction from the BOQ, and pauses once
  so that LT runs far ahead.
* Decode pops the fetch buffer at random rates. Every reused value must equal
  the value LT committed for that same dynamic instruction.
* A back end trains the SIF, feeds T1, and drives two loops through a full
  recycle search each, then an LCT hit.
* At the end, a wrong direction triggers a reboot.

The test fails if any of these mechanisms never happened:

* BOQ stall
* footnote drain
* prefetch release
* indirect hint
* value reuse hit
* validation skip
* reboot
* T1 prefetch and steady state
* LCT insert and hit
* mask deletion
* fetch buffer full
* containment discard
* hint drop

## How far to trust it

Each block is checked cycle by cycle against its model, and each testbench has
been shown to catch a deliberately broken copy of its block. The end-to-end
test exercises the handshakes between the blocks with a synthetic program. It
does not use a real core model, so the following have not been tested:

* the interaction with a real out-of-order pipeline: replays, and partial
  fetch groups that do not end at a branch;
* performance claims.

The numbers that come from the published design are:

* the queue sizes (BOQ 512 × 2 b, FQ 128 × 64 b, VPT 32 × 64 b, fetch buffer
  32);
* T1 and LCT at 16 entries;
* 8 training iterations, the 20-cycle threshold, six skeleton versions and
  10,000-instruction windows;
* the 64-cycle reboot.

Everything else listed under "Where this departs from the published design"
and in the parameter notes above was chosen for this RTL.
