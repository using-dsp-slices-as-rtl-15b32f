# DSP-slice update conflation queue for off-chip event statistics

This is SystemVerilog RTL for an event-statistics tracker. The tracker keeps one
counter per key in off-chip memory and can count one event per clock cycle. The
design follows the paper "Using DSP Slices as Content-Addressable Update Queues"
(T. B. Preußer, M. Chiosa, A. Weiss, G. Alonso). The RTL was written from the
paper's description. It is not the authors' code.

## The problem: read-modify-write against a slow memory

Counting an event means three steps: read the key's counter, add the
increment, write the result back. The memory takes a few hundred nanoseconds to
answer a read, which is about a hundred or more cycles at the tracker clock. Say
a second event for the same key arrives before the first write back. If it
starts its own read, it reads a stale value, and one of the two updates is lost.
Making the second event wait would expose the full memory latency whenever keys
repeat.

The design avoids both by *conflation*. Each key whose read-modify-write cycle
is open stays in an on-chip queue together with the increment it will add.
Suppose a new event finds its key in the queue. It does not touch memory. Its
increment is added to the pending one, and the event itself becomes an empty
slot. Only an event whose key is not pending does two things:

* it issues a memory read, and
* it enters the queue as a new slot.

The queue is as long as the read latency. So when a slot reaches the end, its
read reply has arrived. The reply plus the accumulated increment is then
written back.

Two properties of this use make a plain pipeline enough, with no random-access
CAM:

* Entries leave in the order they entered: the oldest read completes first.
* A write back may come later than the read reply. So the queue can have a
  fixed depth, and every slot travels through all of it.

Because the queue is a pipeline, the lookup is a compare of the new key against
every stage in parallel. Every stage of this pipeline fits in one DSP slice: it
holds the slot, compares the key, and adds the increment.

## How a slot moves through the queue

Each pipeline slot is one 48-bit word, the width of a DSP48 cascade bus:

| bits  | field                                            |
|-------|--------------------------------------------------|
| 47:45 | unused                                           |
| 44    | valid flag (0 = empty slot)                      |
| 43:20 | key (24 bits, 2^24 counters)                     |
| 19:10 | shadow-lane increment (10 bits)                  |
| 9:0   | master-lane increment (10 bits)                  |

The valid flag sits just above the key, so it is part of every comparison. The
increments sit in the low bits. A plain 48-bit addition therefore merges two
slots without touching the key, as long as neither lane overflows. A lane
cannot overflow: a slot is in the queue for about 265 cycles and takes at most
one event per cycle, and 10 bits hold counts up to 1023.

A queue of N matchers is a chain of N+1 `cq_dsp_slice` instances. They are
joined by their cascade path: each slice's P register feeds the next slice's
PCIN. Each new input word (valid, key, increment) is broadcast to every slice
in two ways:

* to the C registers of all matchers, as the key to compare;
* to the A:B input registers, which hold the increment for the add. All later
  slices keep only the increment bits; slice 0 keeps the whole word.

Inside one slice, in clock cycles:

```
 cycle t    input bus = word x
 cycle t+1  AB1 = x, C = key(x); the comparator checks key(x) against the slot
            now being written into P (the adder output)
 cycle t+2  Q = "slot in P has key(x)";   AB2 = x
            -> next slice: MUX(Q ? AB2 : 0) + PCIN, i.e. the matched slot gets
               x's increment while it moves on by one slice
            -> slice 0: MUX(nomatch ? AB2 : empty) admits x or an empty slot
```

A DSP slice registers its comparator output together with P. So the addition
can only happen one slice *after* the comparison. The second A:B register
delays the increment by exactly that cycle. This is why a stage needs one slice
more than it has matchers: the last slice (no comparator) makes the delayed
addition for the last matcher.

The NOR of all Q flags is the "no match anywhere" signal. It drives the MUX of
slice 0. A matched input is replaced by an empty slot there, and the same
cycle's add folds its increment into the older slot. An unmatched valid input
is admitted, and that admission is the memory read. Empty slots come from
cycles without an event and from conflated events. An empty input compares
equal to empty slots, but it only adds zero to them and is itself dropped, so
this is harmless.

The increment is always added to the *older* pending slot ("forward
conflation"). That has three consequences:

* a slot is never starved by later events;
* the sum in a slot is bounded by how long the slot stays in the queue;
* the order of admitted keys equals the order of memory reads, so a write back
  finds its read reply simply by position.

## The pipelined match feedback and the 0-6-250 schedule

The NOR over 244 match flags cannot be computed in one cycle at 375 MHz. It
also lies on a loop: match, admit, next comparison. `match_reduce` turns it
into a tree of OR levels, with six inputs per node (one FPGA LUT) and PIPE
register levels. To keep the admission decision aligned with its word, the
input path of slice 0 is delayed by the same PIPE registers. The other slices
still see the undelayed bus, so merging stays immediate.

The delay has a cost. A word in those PIPE input registers is not yet in the
queue, so a following identical key cannot see it. Two equal keys therefore
must arrive at least PIPE+1 cycles apart. That spacing comes from a short first
queue. A queue of N matchers whose NOR is combinational accepts any input. Its
output never shows the same key twice within N+1 slots, because any repeat
inside that window was merged into the first. Hence the schedule evaluated in
the paper and built here (`conflation`):

| stage | gap in | matchers | feedback registers | gap out |
|-------|--------|----------|--------------------|---------|
| 0     | 0      | 6        | 0                  | 6       |
| 1     | 6      | 244      | 6                  | 250     |

Only the last stage decides memory traffic:

* admission to stage 1 issues the read (`rd_valid`, `rd_key`);
* a valid slot leaving stage 1 issues the write-back request (`wr_valid`,
  `wr_key`, `wr_inc`).

A slot spends 1 + 6 + 244 + 1 = 252 cycles in stage 1, which is 672 ns at
375 MHz. Stage 0's outputs are neither reads nor writes. They are just a
thinner stream for stage 1.

The whole pipeline has a single clock enable, like the CE pins of the DSP
slices. It advances every cycle unless the memory side pushes back. While it
is held, the event source is held too.

## Around the queue: the tracker

```
 clk (375 MHz in the evaluated system)          mclk (133.25 MHz memory user clock)
 event_source -> lane select -> conflation --RD/WR--> rmw_scheduler -> mem_arbiter -> controller
                      ^                                                   ^      ^      (4 lanes)
                      +------- snapshot flag (synchronised) ----- snapshot_reader  counter_init
```

**rmw_scheduler.** Reads and write requests cross into the memory clock domain
through two Gray-pointer FIFOs. When either FIFO is full, the conflation
pipeline stalls; this is the only backpressure.

On the memory side, one decision is made per cycle, following four rules:

* **A read never overtakes a write.** Every read carries the number of writes
  requested up to its own cycle. It may issue only after that many writes have
  issued. This keeps a new read of a key behind the write back of the key's
  previous cycle. Such a write leaves the queue no later than the new read is
  admitted. When both happen in the same cycle, the write counts as older.
* **A write needs its read reply.** Replies come back in read order into a
  reply FIFO. The write data is reply + increment, lane by lane.
* **Reads need room for their replies.** A read issues only while the reply
  FIFO has room for its reply.
* **Commands are grouped by kind.** All commands of one cycle are of one kind,
  up to four. The scheduler stays with one kind until that kind has nothing
  ready, or until it has issued GROUP=16 commands while the other kind waits.
  This reduces bus turnarounds.

Reads and replies can always make progress: a write waits only for its own,
older read. The reply FIFO (512) is deeper than the number of reads that can be
open at once (about 260), so it never blocks them.

**mem_arbiter.** The arbiter grants one client's whole bundle per cycle, in
fixed priority:

1. initialization,
2. scheduler,
3. snapshot readout.

For each granted read it records the owner in a FIFO. Returning replies are
steered to their owner in order.

**counter_init.** On request, it writes the zero word to all 2^24 counter
words, four per cycle.

**Master and shadow counts, snapshot_reader.** Each memory word holds a 32-bit
master count (bits 31:0) and a 32-bit shadow count (bits 63:32), in a 72-bit
controller word. Normally an event increments the master lane. A snapshot runs
in four steps:

1. `snapshot_reader` raises `snap_active`. Once that flag reaches the tracker
   clock, new events go to the shadow lane. The lane is chosen when an event
   enters the conflation, so it follows arrival order exactly.
2. The reader waits for `master_flushed`. The scheduler raises it after two
   things have happened. First, the pipeline has advanced its full depth since
   the lane switch, so no master increment is left inside. Second, every write
   requested up to then has been issued.
3. The reader reads all counters at the lowest priority and emits (key,
   master, shadow) for each.
4. The reader drops `snap_active`. From then on, a write back folds the shadow
   count into the master count.

The master counts read this way are exactly the events that arrived before the
snapshot began. The end-to-end tests check that per key.

## Interfaces

`stats_tracker_top` has plain ports:

* clocks and resets:
  * `clk`, `rst`: tracker clock and its synchronous reset;
  * `mclk`, `mrst`: memory user clock and its synchronous reset;
  * the two resets are applied together.
* event source (`clk` domain):
  * `ev_enable` turns the source on;
  * `key_mask` is ANDed onto the pseudo-random keys. A narrow mask gives
    locality, which makes events conflate.
* administration (`mclk` domain):
  * `init_start` pulse, `init_busy`;
  * `snap_start` pulse, `snap_active`;
  * snapshot results on four lanes: `snap_valid`, `snap_key`, `snap_master`,
    `snap_shadow`.
* memory controller (`mclk` domain):
  * `mc_cmd_valid[3:0]` and `mc_cmd[3:0]`, each command being
    `{we, addr[23:0], wdata[71:0]}`, packed from lane 0;
  * the controller takes all of them in a cycle with `mc_ready`;
  * read data comes back on `mc_rd_valid` / `mc_rd_data`, in command order,
    with lower lanes older.
* observation pulses, for counting mechanisms in a testbench:
  * `clk` domain: `ev_taken`, `stall`, `conflated0`, `conflated1`,
    `rmw_read`, `rmw_write`;
  * `mclk` domain: `read_held`, `kind_switch`.

Shared widths and types are in `rtl/cq_pkg.sv`.

## Parameters

| parameter (module)                                    | default | origin                                              |
|-------------------------------------------------------|---------|-----------------------------------------------------|
| `KEY_W` (package)                                     | 24      | paper: 2^24 buckets                                 |
| `CNT_W`, lanes (package)                              | 10, 2   | paper: two 10-bit counts                            |
| `DP_W` (package)                                      | 48      | paper: DSP cascade width                            |
| `N0`, `N1` (`conflation`, top)                        | 6, 244  | paper, 0-6-250 schedule                             |
| `PIPE1` (`conflation`, top)                           | 6       | paper                                               |
| `FANIN` (`match_reduce`)                              | 6       | paper: LUT fan-in                                   |
| `WORDS` (init, snapshot, top)                         | 2^24    | paper                                               |
| `MEM_LANES` (package)                                 | 4       | paper: four command lanes                           |
| `GROUP` (`rmw_scheduler`)                             | 16      | paper: 16-read/16-write blocks in its evaluation    |
| `REQ_DEPTH`, `REPLY_DEPTH` (`rmw_scheduler`)          | 512     | this design                                         |
| `CTR_W` (package)                                     | 32      | this design (stored count width)                    |
| `OWN_DEPTH` (`mem_arbiter`)                           | 1024    | this design                                         |

## Where this RTL departs from the paper, or goes beyond it

* **Modelled DSP slices.** The DSP slices are written as ordinary RTL
  (registers, MUX, adder, masked compare) in the structure of a DSP48E2 used
  with the multiplier off. Mapping `cq_dsp_slice` onto a primitive is left to
  synthesis or to a hand instantiation.
* **No queue segmentation.** The evaluated design splits the 244-matcher stage
  into segments of at most 42 comparators over several DSP columns. That uses 5
  extra slices and an unbalanced reduction tree. The paper does not say how the
  extra slices keep every pending slot matchable, so the stage here is one
  unbroken chain with a uniform OR tree. This gives 252 slices instead of 257.
  The reuse of the A:B cascade between neighbouring slices is a routing measure
  and is not modelled either.
  The input word is broadcast from one register set. The paper suggests
  duplicating input buffers to limit fanout. That is left to the synthesis
  tool's register replication.
* **Write-back adder in the memory clock domain.** The paper's block diagram
  shows only read and write requests going from the conflation to the
  scheduler. So the reply FIFO and the final adder sit in the scheduler, in the
  memory clock domain.
* **Own choices where the paper gives no detail:**
  * the scheduler's ordering tags, group policy and credit rule;
  * the arbiter's bundle grant and reply routing;
  * the initialization sweep;
  * the snapshot flush handshake;
  * the 32-bit stored counts;
  * the event source's LFSR and key mask.
* **Shadow merge.** The paper says shadow counts are merged into the master
  counts once a snapshot completes, but not how. Here the merge happens at each
  key's next write back. A key that sees no event between two snapshots still
  has its older shadow count unmerged when the second snapshot reads it, and
  that snapshot under-reports it.
* **Command bandwidth.** Here each of the four command lanes carries one
  command per 133.25 MHz memory user cycle, which is 533 M commands/s. A
  stream of distinct keys at 375 MHz needs a read and a write per cycle,
  750 M/s, so under that load the pipeline stalls. The paper compares 750 MT/s
  with the memory's 1066 MT/s peak. Its controller has "doubled" data lanes,
  but the paper does not say how commands map onto them.
* **Not included:** the memory controller IP and the RLDRAM device. The
  general-purpose-fabric reference implementation and the LUTRAM-CAM
  alternative are only comparisons in the paper, so they are not here either.
  `tb/mem_ctrl_model.sv` is a behavioural stand-in for the controller and
  memory: four in-order lanes, a fixed read latency plus jitter, and a random
  ready signal.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`. The expected values are computed
independently of the RTL:

* `tb_cq_dsp_slice` checks a cycle model of the slice registers.
* `tb_match_reduce` checks the NOR of the flags PIPE enabled cycles earlier.
* `tb_conflation_stage` and `tb_conflation` use a scoreboard that checks:
  * per-key sums of increments in and out;
  * that no read is issued while the key's cycle is open;
  * write order and latency (N+1 enabled cycles per stage);
  * the output key spacing of a stage.
* `tb_rmw_scheduler` plays the conflation against the controller model and
  checks:
  * that no read passes an older write;
  * that each cycle's commands are of one kind;
  * the final counters;
  * the flush handshake.
* `tb_mem_arbiter`, `tb_counter_init` and `tb_snapshot_reader` check priority
  and reply routing, complete coverage of the address range, and read order.
* `tb_stats_tracker_top` runs the whole tracker with N1=40 and 4096 counters:
  * it clears the counters, streams events with and without locality, takes a
    snapshot while events flow, streams more events and drains;
  * it checks every snapshot value and every final counter against its own
    copy of the event LFSR;
  * it requires every mechanism to occur: stall, conflation in each stage, held
    read, kind switch, shadow designation and shadow fold.
* `tb_stats_tracker_full` does the same at the default size: 250 matchers and
  all 2^24 counters cleared and snapshotted. It takes about 4-5 minutes with
  Verilator and makes about 16.8 million checks.

To simulate, for example, the reduced end-to-end test:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/cq_pkg.sv tb/tb_stats_tracker_top.sv --top tb_stats_tracker_top -o sim
./obj_dir/sim
```

Replace the testbench name to run any other one. Uninitialised state is never
read: every register that matters is reset, so runs with
`+verilator+rand+reset+2` behave the same.

## Files

* `rtl/cq_pkg.sv`: widths, slot layout, command and request types.
* `rtl/cq_dsp_slice.sv`: one DSP slice of a queue.
* `rtl/match_reduce.sv`: pipelined NOR of the match flags.
* `rtl/conflation_stage.sv`: one queue (N matchers + delayed-add slice).
* `rtl/conflation.sv`: the two-stage 0-6-250 conflation.
* `rtl/event_source.sv`: LFSR event generator.
* `rtl/async_fifo.sv`, `rtl/mp_fifo.sv`: crossing FIFO and four-wide FIFO.
* `rtl/rmw_scheduler.sv`: crossing, ordering, grouping, reply FIFO and write back.
* `rtl/mem_arbiter.sv`, `rtl/counter_init.sv`, `rtl/snapshot_reader.sv`: the
  memory clients.
* `rtl/stats_tracker_top.sv`: the tracker.
* `tb/mem_ctrl_model.sv`: behavioural memory controller (not synthesizable).
* `tb/tb_*.sv`: testbenches.
