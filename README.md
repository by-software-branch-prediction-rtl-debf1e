# BOSS: a software-fed branch-outcome table for loops

Some branches defeat every history-based predictor: a branch whose condition
depends on freshly loaded data (`if (m_square[pos + dir[k]] == color)`) has no
pattern in its past outcomes. When such a branch sits in a loop without a
loop-carried dependence, the program itself can compute all its outcomes early,
in a short *pre-execute loop* placed before the real loop, much as software
prefetching computes addresses early. BOSS (Branch-Outcome Side-channel Stream)
is the hardware that receives those precomputed outcomes and plays them back to
the front end, one per dynamic instance of the branch, so that the instance is
predicted exactly.

Software passes outcomes with ordinary stores into a reserved address range, so
no new instructions are needed. Each loop iteration number has its own byte
address, which lets a compiler vectorise the pre-execute loop: one 16-byte
vector store hands over 16 outcomes. The outcomes are only hints. If they are
late, missing or wrong, the branch is simply predicted and resolved as usual.

This repository holds synthesizable SystemVerilog for the BOSS unit that sits
beside a core's branch predictor. It also has self-checking testbenches for
every block and for the whole unit.

```c
BOSS_open(ch, BR, End);                 // once: which branch, which loop end
do {
    for (k = 0; k < 4; k++)             // pre-execute loop
        BOSS_write(ch, k, m_square[pos + m_dirs[k]] == kcolor);
    for (k = 0; k < 4; k++) {           // target loop, unchanged
BR:     if (m_square[pos + m_dirs[k]] == kcolor) { ... }
    }
End: pos = m_next[pos];                 // first instruction after the loop
} while (pos != vertex);
```

## Channels, iterations and generations

The hard part of BOSS is matching each stored outcome to the right *dynamic*
instance of the branch. The front end fetches speculatively. It may run ahead
into the next outer-loop iteration, be squashed back, or leave the loop early.
BOSS identifies an instance by three numbers:

* **channel**: which configured branch (4 channels);
* **iteration**: the instance's position in the loop, 0..255. Numbers above 255
  wrap onto the same slots, so a longer loop is fed in strips of up to 256;
* **generation**: which run of the loop, that is, which outer-loop iteration.
  It is one bit, so two consecutive generations can be told apart.

Software never sends a generation. The hardware counts it on both sides, using
the *Loop-End* instruction that was named at configuration time:

| event | producer side (commit order) | consumer side (fetch order) |
|---|---|---|
| BOSS_write store commits | outcome bytes written at the producer generation | |
| target branch fetched | | look up <ch, consumer gen, consumer iter>; consumer iter + 1 |
| target branch squashed | | consumer iter - 1 |
| target branch commits | the outcome it used is removed | |
| Loop-End fetched | | push consumer iter on the stack, consumer iter = 0, consumer gen + 1 |
| Loop-End squashed | | pop the stack into consumer iter, consumer gen - 1 |
| Loop-End commits | producer gen + 1 | |
| BOSS_open / BOSS_close | all counters, the stack and the channel's outcomes reset | |

The stack exists because a squashed Loop-End instruction must return the front
end to the iteration it had reached in the old generation. One level is enough
for the behaviour the design targets. The depth is a parameter.

**One generation per channel.** Each outcome entry is just `<valid, outcome>`,
2 bits. The channel also carries a 1-bit tag that records which generation its
contents belong to. A lookup hits only if the entry is valid *and* the tag
equals the consumer generation. A BOSS_write whose producer generation differs
from the tag is the first outcome of a new generation. In the same cycle it
invalidates whatever the old generation left behind, for example after an early
`break`, sets the tag and writes its own bytes. This is safe because such a
write commits after every instance of the older generations has committed.

**Commit tag.** At fetch the unit returns the `<gen, iter>` it looked up with
(`f_tag_*`). The core keeps this tag with the branch, like any other predictor
metadata, and hands it back at commit (`c_tag_*`). The unit then clears exactly
that entry, provided the channel still holds that generation. Clearing used
entries matters once iteration numbers wrap: slot 3 must not answer for
iteration 259 with the outcome of iteration 3.

A worked case: the front end fetches the four branch instances of generation 0,
the Loop-End and the first branch of generation 1, all before the generation 1
stores commit. That generation-1 branch looks up with generation 1 while the
channel still holds generation 0, so it misses (late) and gets the conventional
prediction. After the Loop-End commits (producer generation 1), the first
generation-1 store clears the channel. Branches fetched after that hit.

## Software interface (memory map)

Channel `c` occupies 512 bytes at `BOSS_BASE + 512*c` (`BOSS_BASE` =
`0xF000_0000` by default, see `boss_pkg`):

| offset | access | meaning |
|---|---|---|
| 0..255 | store, 1..16 bytes | BOSS_write: byte *i* is the outcome of iteration (offset+*i*), bit 0 = taken. Lanes past offset 255 are dropped. |
| 0..255 | load | `{valid, outcome}` of that entry in bits 1:0 |
| 256 | 8-byte store | configuration word. Non-zero: BOSS_open, with bits 31:0 the signed byte distance from this store's PC to the target branch and bits 63:32 the distance to the Loop-End instruction. Zero: BOSS_close. |
| 256 | load | status: bits 7:0 consumer iter, 15:8 stack top, bit 16 consumer gen, bit 24 producer gen, bit 63 open |

Other addresses in the range are ignored by stores and read as 0. A BOSS_write
to a channel that is not open is dropped. Loads let an operating system or
runtime find open channels and inspect them. Since everything is a hint, a
context switch may simply lose the state.

## Block structure

```
committed store --> boss_mmio_decode --open/close--> boss_pc_table (Branch PCs)
                          |                          boss_pc_table (Loop-End PCs)
                          | write                       ^ fetch / squash / commit PCs
                          v                             | hit + channel
                    boss_outcome_lut <--lookup/remove-- boss_consume_ctrl
                      |      ^  ^                        |  ops
          hit,outcome |      |  +--- prod gen ----- boss_gen_table (producer)
                      v      +------ readout        boss_gen_table (consumer)
   conventional --> boss_pred_mux --> direction     boss_iter_table, boss_iter_stack
                             boss_state_readout <-- loads
```

| file | block |
|---|---|
| `rtl/boss_pkg.sv` | sizes, memory map, `boss_op_e` and `cnt_op_e` enums |
| `rtl/boss_mmio_decode.sv` | splits a committed store into BOSS_write / BOSS_open / BOSS_close |
| `rtl/boss_pc_table.sv` | one PC per channel, searched by three PCs per cycle (used twice) |
| `rtl/boss_outcome_lut.sv` | 4 x 256 x `<valid, outcome>` plus generation tags |
| `rtl/boss_gen_table.sv` | 1-bit generation counters (producer and consumer instances) |
| `rtl/boss_iter_table.sv` | 8-bit consumer iteration counters |
| `rtl/boss_iter_stack.sv` | per-channel stack of saved iteration counters |
| `rtl/boss_consume_ctrl.sv` | turns fetch/squash/commit hits into counter, stack and table operations |
| `rtl/boss_state_readout.sv` | answers loads from the range |
| `rtl/boss_pred_mux.sv` | BOSS outcome overrides the conventional direction on a hit |
| `rtl/boss_unit.sv` | top level |

## Core interface and timing (`boss_unit`)

* **Fetch**: `f_valid`, `f_pc`, `f_conv_taken` in. `f_pred_taken`,
  `f_boss_hit` and `f_tag_gen/iter` out, combinationally in the same cycle.
* **Squash**: `s_valid`, `s_pc`. One squashed instruction per cycle, youngest
  first. No fetch may be reported in a cycle with a squash (the front end is
  being redirected); an assertion checks this.
* **Commit**: `c_valid`, `c_pc`, `c_tag_gen/iter`. For stores, also
  `c_is_store`, `c_st_addr`, `c_st_data` (16 bytes) and `c_st_be`. One
  instruction per cycle, in program order.
* **Loads**: `ld_addr` in; `ld_hit` and `ld_data` out, combinationally.
* `active` is high while any channel is open. With no channel open nothing can
  match, and the unit is idle.

All table updates take effect at the next rising edge. Reset is synchronous and
active low, and clears every table. A lookup in the same cycle as a write to
the same entry sees the old contents.

Storage at the defaults: 2048 outcome bits, 4 x 8 B branch PCs, 4 x 8 B
Loop-End PCs, 4 x 8 b iteration counters, 4 x 8 b stack entries and 2 x 4 x 1 b
generation counters. This is the 329-byte budget the design is built around.
On top of it come 4 generation-tag bits, 8 PC-table valid bits and 4 stack
occupancy bits. Synthesis gives about 2650 flip-flops and no memories: the
outcome array is kept in flip-flops so that a channel can be cleared in one
cycle.

## Sizing against the loops it was evaluated on

The design was evaluated on hot loops from SPEC CPU 2017 (the Go engine leela,
astar, bzip2, soplex), a JPEG encoder and two graph kernels (connected
components, BFS). Each case targets one branch, so it needs one of the four
channels. The four leela cases run together need all four. The leela loops walk
the four neighbours of a board point, so their trip counts are 4 or 8, far
below the 256 slots. Trip counts of the other loops are not published. Longer
loops are strip-mined by the compiler into chunks of at most 256 iterations,
which the wrapping iteration numbers already serve; `tb_boss_unit` runs a
300-iteration loop this way. The three leela use cases are simulated in
`tb_boss_leela_usecases`:

* partial coverage: every covered instance hits, for all nine sub-ranges of
  0..3 and the full range;
* correlation: outcomes written by one function's loop reach the first
  generation of another loop's branch;
* record-and-replay: no hits, as explained under *Known limits* below.

## What follows the source design and what is this implementation's choice

Taken from the design as published: the channel, iteration and generation
addressing; the sizes (4 channels, 256 iterations, 1-bit generations, one-level
stack, 8-byte PCs); the 8-byte configuration area and 256-byte outcome area per
channel, with iteration numbers wrapping; the event rules in the table above;
discarding the previous generation on the first write of a new one; the
override multiplexer; loads that read the state; and turning the unit off
until a channel is opened, with a close operation.

Choices made here, where the source is silent:

* The address map (base, 512-byte stride, configuration at offset 256), the
  configuration-word layout (PC-relative offsets, all zero = close), bit 0 as the
  outcome, and the layout of the status word.
* Store width of 16 bytes (one 128-bit vector store per cycle).
* The `<gen, iter>` tag returned at fetch and given back at commit, so that the
  commit can find the entry to remove.
* One fetch, one squash and one commit observed per cycle. A wider core would
  need replicated search ports and a priority order among same-cycle events.
* The per-channel generation tag, which keeps one generation in 2 bits per entry.
* One PC per channel, so a channel feeds one static branch. The source design
  mentions one channel feeding copies of a branch (after unrolling), but its
  storage budget has one PC per channel. Supporting copies would mean more PC
  entries per channel.
* Lowest channel wins if two channels were opened with the same PC. A full stack
  drops its oldest entry on push, and an empty stack pops 0.
* Nothing is saved by the hardware when a channel is reopened (the source only
  floats this as a possibility).

Known limits:

* **Record-and-replay.** In this use, outcomes stored during one run of a loop
  are replayed in the next run. It is described only at the software level.
  Under the rules above it does not produce hits: the store of iteration *k*
  is tagged with the current generation, and the commit of branch instance *k*
  of that same generation then removes it. The next generation's lookups also
  carry a different generation number. The hardware side of that use case is
  not specified, and it is not implemented beyond the rules above.
* **Generation aliasing.** Because the generation is 1 bit, a front end that
  runs two whole generations ahead of the committed stores could match outcomes
  of the wrong generation. The design accepts this.

## Simulation

Every testbench prints `TB_RESULT checks=N failures=M` and ends by itself. Each
also has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb --top-module tb_boss_unit \
    rtl/boss_pkg.sv tb/tb_boss_unit.sv
./obj_dir/Vtb_boss_unit
```

| testbench | what it checks |
|---|---|
| `tb_boss_unit` | the whole unit at its default size, driven by a small reorder-buffer model of a core. Runs 40+ generations of a 4-iteration loop with vector and byte stores, partial coverage, early exits, squashed branches and squashed Loop-Ends, late outcomes, a front end two generations ahead, a 300-iteration loop that wraps the slots, a second and third channel, readout and close. Every prediction and tag is compared with the testbench's own view of what software wrote, and every mechanism must occur at least once. Under 2000 cycles. |
| `tb_boss_leela_usecases` | the three use cases from the Go engine the design was evaluated on: the nine partial-coverage ranges of the `kill_or_connect` loop, record-and-replay on `save_critical_neighbours`, and outcomes passed from one function's loop to a correlated branch in another |
| `tb_boss_outcome_lut` | random writes, generation changes, removals, clears, lookups and readouts against a model |
| `tb_boss_consume_ctrl` | every event combination against the event table |
| `tb_boss_mmio_decode` | directed and random stores, including sign-extended offsets and clipped vector stores |
| `tb_boss_pc_table`, `tb_boss_gen_table`, `tb_boss_iter_table`, `tb_boss_iter_stack`, `tb_boss_state_readout`, `tb_boss_pred_mux` | each block against a reference model |

How far to trust it: the RTL lints cleanly and synthesizes without latches. The
testbenches check the rules described here, and each one fails when a
deliberate bug is put into its block. The rules themselves were reconstructed
from a short published description and a block diagram, and have not been
checked against a cycle-level model of a real core. Whether the outcomes
arrive in time in practice depends on the core and the software, which are not
modelled here.

## Changing the design

Sizes are parameters of `boss_unit` with defaults in `boss_pkg`. They are
`N_CH` (channels), `N_ITERS` (power of two), `W_GEN` (generation bits),
`DEPTH` (stack depth), `W_PC`, `W_ADDR` and `N_LANES` (store width). The
memory map constants are in `boss_pkg`. A wider generation number lowers the
aliasing risk described above, at `N_CH` bits of cost per extra bit.
