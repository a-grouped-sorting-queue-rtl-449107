# Grouped sorting timer queue

A NIC that keeps per-flow state needs a timeout for each flow. Every packet
of a flow pushes that flow's expiry time forward, and a flow whose expiry
time has passed must be noticed promptly. This design holds the timers in
a hardware priority queue sorted by expiry time, and it has two properties
that a plain sorted queue lacks:

* **Update in place.** An element is `{ID, DATA}`, where ID is the flow and
  DATA is the expiry time. Pushing an ID that is already queued moves it:
  the old entry is deleted and the new one is inserted in the same pass
  through the array. This costs the same 3 clock cycles as any other
  operation.
* **Group sorting.** DATA is a fixed-width counter value (`DW` bits), so
  expiry times wrap around. The MSB of DATA splits the value range into two
  halves, the *groups*. The group that holds the current head is sorted
  first and the other group after it. An expiry time that wrapped past zero
  therefore queues up behind the times that have not wrapped yet, instead
  of jumping to the front. Within a group the order is plain numeric order,
  and equal values stay in FIFO order. This is correct as long as no two
  live timers are more than half the DATA range apart, which the timer
  front end guarantees with `DW > WO + 1`.

The queue is a one-dimensional systolic array of `N` units, each holding `M`
elements in a small shift register. One operation enters the array every 3
clocks. The default is 4096 entries (`N=2048, M=2`), a 12-bit ID and a
16-bit timer.

## Files

| file | what |
|---|---|
| `rtl/gsq_pkg.sv` | shared types: operation flags, grant encoding |
| `rtl/overflow_cmp.sv` | the group-sorting comparator |
| `rtl/shift_block.sv` | one slot of a unit |
| `rtl/su_control.sv` | enable logic of a unit |
| `rtl/interface_register.sv` | pipeline register between units |
| `rtl/systolic_unit.sv` | one unit: M slots, comparator to the next unit, control, interface register |
| `rtl/gs_queue.sv` | the queue: N units plus issue control |
| `rtl/timer_ctrl.sv` | reference timer, expiry detection, request arbitration |
| `rtl/timer_queue_top.sv` | top: `timer_ctrl` + `gs_queue` |
| `tb/tb_<module>.sv` | a self-checking testbench for each module |
| `tb/tb_timer_queue_full.sv` | the top at default size with 2047 flows |
| `tb/tb_timer_usecase.sv` | the same workload with a 9-bit timer that wraps |

## The comparator (`overflow_cmp`)

For an incoming value `push` against a resident value `hold`, with
`highest` being the MSB of the current head's DATA:

```
same group (push[MSB] == hold[MSB]):  push goes ahead  <=>  push < hold
different groups:                     push goes ahead  <=>  push[MSB] == highest
```

The strict `<` puts a new element behind the elements of equal value,
which keeps FIFO order among equal values. The same comparator is used
inside each shift block and as *Next_CMP*, which compares against the head
of the following unit.

## Slots and the thermometer (`shift_block`, `su_control`)

A slot holds `{ID, DATA}`. ID 0 means empty, and an empty slot holds DATA
all ones. For each slot `j` of a unit the control sees two things:

* `f[j]`: the pushed element goes ahead of slot `j`. An empty slot always
  gives 1. Because the queue is sorted, `f` is a thermometer code:
  `0..0 1..1` from the head side.
* `hit[j]`: slot `j` holds the ID being removed. It is set for the head
  slot on a pop. At most one bit is set.

Let `D[j]` be the OR of `hit[0..j]`, meaning the deletion point is at or
before `j`. Let `f[M]` stand for "the element goes ahead of the next unit's
head". It is used only when this unit deletes, because only then does the
unit have a free slot at its tail. Each slot then takes one of three
actions:

```
set[j]   = f[j] & ~f[j-1] & ~D[j-1]   |   f[j+1] & ~f[j] & D[j]
left[j]  = f[j-1] & ~D[j-1]            -- take the head-side neighbour (make room)
right[j] = D[j] & ~f[j+1]              -- take the tail-side neighbour (close the gap)
```

`right` on the last slot takes the next unit's head, which pulls it forward
one unit. These terms give every combination in one step: an insert
without a delete, a delete without an insert, and an insert combined with
a delete on either side of it (an update moving an element toward the head
or toward the tail). They are plain AND/OR logic shared by all slots of a
unit, with no state machine.

## Propagation between units (`systolic_unit`, `interface_register`)

An operation carries flags: `push` (element travelling, with its ID and
DATA), `remove` (ID to delete), `pop` (delete my head) and `push_first`
(insert this element at your head). A push of an ID, whether it is a new
timer or an update, enters unit 0 as `push + remove(ID)`. After its search
step, each unit decides what to pass on:

| in this unit | passed to the next unit |
|---|---|
| insert and delete | nothing; the operation ends here |
| delete only | `pop`, so the next unit gives up its head to refill this unit's tail. A travelling `push` is also passed on, unless Next_CMP placed it in the freed tail slot. |
| insert only | `push_first` of the evicted tail element, if it was not empty. A `remove` that was not found is also passed on. |
| neither | `push` and/or `remove` unchanged |

Each unit holds a sorted run, and in queue order every unit's head comes
after the previous unit's tail. So an evicted tail always belongs at the
head of the next unit. So `push_first` needs no comparison.

An element evicted by the last unit leaves the queue, which was full, and
is reported on `drop_*`. A `remove` that leaves the last unit found nothing.
It is reported on `id_miss_o`; for a push this just means a fresh enqueue.

## Timing

Each operation takes three cycles in a unit:

1. **search**: compare, match IDs, register the slot enables, and load the
   interface register;
2. **set & shift**: the slots load their new contents;
3. **finish**: the unit is idle.

The next unit searches in the cycle after this unit's search, so an
operation reaches unit `k` exactly `k` cycles after it was accepted. A new
operation is accepted every 3 cycles (`op_ready_o`). That is the shortest
period at which every head a search reads has settled. Throughput is
therefore `f_clk / 3` regardless of `N` and `M`. At the 526 MHz the paper
reports for 28 nm, that is 175 M operations/s. A pop returns the head on
`pop_*` one cycle after acceptance, and the head outputs are valid again 2
cycles after an accept.

## Timer front end (`timer_ctrl`)

* The reference time `R_t` (`DW` bits) advances by one every `P` clocks
  (`P=6` by default). With one queue operation every 3 clocks, at least one
  push and one pop fit into each tick.
* A packet of flow `id` with timeout `TO` (`WO` bits) requests
  `push(id, R_t + TO mod 2^DW)`.
* The head has expired when `0 < (R_t - head) mod 2^DW < 2^(DW-1)`. This is
  the same as `head < R_t` when nothing has wrapped, and it stays right
  after a wrap.
* Three request sources compete for the queue: expiry pops, packet pushes
  and explicit removes. They are served round robin, so pushes and pops
  alternate while both are pending. Expired timers with equal values
  therefore cannot hold off updates, and updates cannot hold off expiry.

`timer_queue_top` reports each dequeued timer on `exp_*`, the current
earliest timer on `next_*`, and timers lost to a full queue on `drop_*`.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `IDW` | 12 | ID width (IDs 1 .. 2^IDW-1) |
| `DW` | 16 | timer/DATA width `W_r` |
| `WO` | 14 | timeout width; `DW > WO+1` is required and checked at elaboration |
| `N` | 2048 | systolic units |
| `M` | 2 | slots per unit, at least 2 |
| `P` | 6 | clocks per timer tick |

## Where this departs from the paper, or fills gaps

* **Unit-to-unit offset.** The paper's timing diagram offsets neighbouring
  units by two cycles. Here the offset is one cycle, and the next unit
  searches while this unit shifts. The throughput is the same (one
  operation per 3 cycles), and the latency through the array is halved.
* **Gate-level terms.** The comparator function and the enable terms are
  derived here from the described behaviour. The paper states the
  principle but not the logic.
* **Handshakes and status.** The valid/ready interfaces, `drop_*`,
  `id_miss_o`, `next_*` and the explicit remove port of the top are
  additions.
* **Expiry test.** The wrap-safe form above is this design's own. The
  paper only states that the head is popped once it is below the reference
  time.
* **Full queue.** The behaviour when the queue is full (drop the last
  element) is a choice made here.
* **Timeout width.** `WO=14` is chosen as the largest value that the width
  rule allows at `DW=16`.
* **Reset.** Reset is asynchronous and active low, and empties every slot.
* **Not reproduced.** Area, frequency and FPGA resource figures are not
  checked by simulation. The packet trace of the paper's use case is
  replaced by synthetic flows.

## Verification

Every module has a testbench that compares the module against an
independent model:

* the comparator is checked exhaustively at `DW=5`;
* the control is checked exhaustively at `M=4` against a list model;
* the unit and the queue are checked against a sorted-list model with
  update, group wrap, eviction, pop refill and Next_CMP placement, at small
  `N`/`M`. The queue testbench also checks the 3-cycle issue rate;
* `timer_ctrl` is checked every cycle against values computed in the
  testbench: the tick count, `R_t + TO`, the expiry flag across many timer
  wraps, and the round-robin grant order;
* `tb_timer_queue_top` runs the whole design at `N=8` with fixed and random
  timeouts, an overflow phase and a drain. It counts updates, group
  wraps, `push_first` evictions, drops and expiries, and fails if any of
  them never happened;
* `tb_timer_queue_full` runs the default-size top (4096 entries) with 2047
  flows, `TO=127` and `P=6`, which resembles the paper's flow-timeout
  experiment, with random flow IDs and an event every 8 clocks on average.
  A second phase draws the timeout per event from 1..255, so that newer
  timers overtake older ones and tails are pushed down the array.
  Every expiry must carry the flow's latest timer value and must come
  between `TO+1` and `TO+65` ticks after the flow was last armed. Nothing
  may be dropped, and the queue must be empty at the end.
* `tb_timer_usecase` runs the same workload with only a 9-bit timer, at
  queue depth 2048 (`N=1024`) and with a flow event every 4 clocks. The
  timer wraps every 3072 clocks, and about a quarter of all expiration
  times wrap past zero. Every timer must still expire between `TO+1` and
  `TO+65` ticks after it was armed. This is the smallest timer width that
  the width rule allows for `TO=127`.

Each testbench ends with a `TB_RESULT checks=.. failures=..` line. To run
one with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/gsq_pkg.sv \
    tb/tb_gs_queue.sv --top-module tb_gs_queue -Mdir obj -o sim
obj/sim +verilator+rand+reset+2
```

The full-size testbench takes a few minutes to compile. The default top
has 4096 slots of 28 bits each, plus 2048 interface registers.
