# A timer queue with in-queue update: hybrid systolic / shift-register priority queue

Network hardware keeps thousands of timers: flow-entry timeouts, MAC-address
ageing, TCP retransmission timers. Instead of decrementing every timer, one can
keep the timers in a priority queue ordered by expiry time and compare only the
head with a free-running clock. That needs a queue which can not only enqueue
and dequeue, but also delete an arbitrary timer (the ACK arrived) and change
the expiry time of a timer that is already queued (the timeout was extended or
shortened), all in constant time and at a high clock rate.

This RTL implements such a queue. Each element is a pair (ID, DATA): ID names
the timer, DATA is its expiry time, and the element with the smallest DATA is
the head. The queue supports

| command   | effect |
|-----------|--------|
| push      | enqueue (ID, DATA); if ID is already queued, replace its DATA and move it to its new place (update) |
| pop       | remove the head and return it (dequeue) |
| delete    | remove ID wherever it is |
| peek      | the head is always visible on output ports |

Elements with equal DATA leave in the order they were pushed. Every command
takes the same, depth-independent time, and a new command can be accepted
every five clock cycles.

The design follows the architecture of a published timer-queue design (Wang,
Yue, Pan, Shi, Hao, "Design of a Timer Queue Supporting Dynamic Update
Operations"); the sections below say where this RTL fills gaps or departs
from it.

## Organisation: a chain of blocks of slots

```
        tail                                                     head
   +-----------------+        +-----------------+        +-----------------+
   | block N-1       |  ...   | block 1         |        | block 0         |
   | slot M-1 ... 0  | <----- | slot M-1 ... 0  | <----- | slot M-1 ... 0  | <--- commands
   +-----------------+ ops    +-----------------+ ops    +-----------------+
            first element -->          first element -->          --> head (peek)
```

* A **slot** (`tq_shift_block`) holds one element and compares it with the
  operands that its block broadcasts: is the held ID the pushed ID, is it the
  ID to delete, is the pushed DATA smaller than the held DATA. It can load a
  new element, its right-hand neighbour's (a *left shift*, towards the tail)
  or its left-hand neighbour's (a *right shift*, towards the head).
* A **systolic block** (`tq_systolic_block`) holds M slots, a central
  controller (`tq_control`) and an interface register (`tq_interface_reg`).
  Inside a block the M slots form a shift register with a broadcast bus, so
  an insertion or removal anywhere in the block is done in one clock edge.
* **N blocks** are chained (`timer_queue`). Between blocks only two things
  travel: operations, through the interface register, towards the tail; and
  each block's first element, which the previous block reads (to compare
  with, and to pull into its last slot when it shifts right).

Slot 0 of block 0 is the head. Within the queue DATA never decreases from the
head to the tail. A slot whose ID is 0 is empty; empty slots are always at the
tail end, and they compare as larger than any DATA, so a push fills them in
order.

The capacity is N*M elements. The bus loading of a long shift register is
limited to M slots, and the logic depth does not grow with N, because a
block talks only to its neighbours.

## How an operation travels

A command enters block 0. Each block does what it can with the elements it
holds and passes the rest on. Four operations exist between blocks:
**push** (an element looking for its place, possibly updating an existing
ID), **delete** (an ID to remove), **pop** (this block must give up its first
element, which the previous block has already taken), and **push-first** (an
element that must become this block's first element, no comparison needed).

What a block passes on after a push:

| ID in this block? | place for DATA in this block? | passes on            |
|-------------------|-------------------------------|----------------------|
| no                | no                            | push                 |
| no                | yes                           | delete + push-first  |
| yes               | no                            | push + pop           |
| yes               | yes                           | nothing              |

* **ID found, no place**: the updated element must move towards the tail
  beyond this block. The block removes the old copy, shifts the elements
  behind it one slot towards the head and pulls the next block's first
  element into its last slot. The next block therefore receives a pop (its
  first element is gone) and the push.
* **Place found, ID not found**: the block inserts the element, shifts the
  elements behind it towards the tail, and its last element falls out. That
  element is larger than or equal to everything in this block and smaller than
  or equal to everything in the next, so it simply becomes the next block's
  first element: push-first. Because the ID may still sit further down, a
  delete travels with it.
* A block that receives **delete + push-first** and holds the ID closes the
  gap: the elements in front of the ID shift one slot towards the tail, the
  push-first element enters slot 0, and nothing travels further. Otherwise it
  inserts at slot 0, evicts its last element and passes delete + push-first
  on.
* A block that receives **push + pop** gives its first element up (the
  previous block took it) and places the pushed element, or passes push + pop
  on again if the element belongs further down.
* **delete** alone: if found, close the gap (right shift, pull in the next
  block's head) and pass pop; if not, pass the delete.
* **pop** alone: right shift, pull in the next block's head, pass pop.

Because equal DATA never compares as "smaller", a pushed element always lands
behind the elements of equal DATA, and push-first moves an element without
comparing it again. That is what keeps equal-DATA timers in arrival order
without a sequence number.

### The comparison with the next block's first element

A pushed element is compared with the M elements of the block and with the
first element of the next block. This matters when a block both removes an
element and looks for a place: if the new DATA is larger than everything in
the block but smaller than the next block's first element, the element must go
into this block's last slot (freed by the removal), not into the next block.
Without the extra comparison the next block's first element, pulled forward
by the pop, would land in front of a smaller element. The testbench of the
block replays this case (block 15 14 10 9 8, next head 17, push 16 with a
pop): 16 must end up in the last slot.

## The set and shift encoding

The controller never searches with a priority encoder. Per block it has

* `id_flag`: one-hot (or zero) position of the matched ID,
* `data_flag`: a thermometer code, ones in every slot whose DATA is larger than
  the pushed DATA (or that is empty); because the block is sorted the ones
  are always the upper slots,
* `next_flag`: the comparison with the next block's first element.

Subtracting one from a vector clears its lowest one and sets every bit below
it; with that, the slot controls follow from a handful of word operations. Write `rmv` for the slot
that empties (the matched ID; slot 0 for a pop) and `ins` for the insertion
thermometer (`data_flag` for a push, all ones for a push-first):

**Element moves towards the tail** (insertion to the left of the removal):

```
lp       = {next_flag, ins[M-1:1]}
set_en   = ~(lp - 1)
right_en = lp XNOR (rmv - 1)
```

`lp` is the thermometer moved down one slot, because the removal frees one
slot; its lowest one is the destination. `rmv - 1` has ones below the removed
slot, so the XNOR is one exactly from the removed slot up to the destination.
If `lp` is zero there is no destination here: nothing is set, everything from
the removed slot up shifts right, and push + pop is passed on.

**Element moves towards the head**, or nothing is removed:

```
set_en  = ~(ins - 1)
left_en = {ins XNOR (rmv - 1), 1'b0}
```

`~(ins - 1)` is the lowest one of the thermometer, the destination; the XNOR
marks the slots from the destination up to just below the removed slot, and the
appended zero moves that range up by one: those slots take their right-hand
neighbour. With nothing removed, `rmv - 1` is all ones and every slot above the
destination shifts; the last element is evicted (delete + push-first).

Worked examples with M = 8 and the block (slot 7 ... slot 0)

```
ID    11  9  5  6  2  7  3  4
DATA  27 22 20 15 14 10 08 07
```

* push ID 7, DATA 21: `id_flag = 0000_0100`, `data_flag = 1100_0000`,
  `lp = 1110_0000`, `set_en = 0010_0000`, `right_en = 0001_1100`. Result
  `11 9 7 5 6 2 3 4`.
* push ID 9, DATA 9: `id_flag = 0100_0000`, `data_flag = 1111_1100`,
  `set_en = 0000_0100`, `left_en = 0111_1000`. Result `11 5 6 2 7 9 3 4`.

Pop is the "towards the tail" form with `rmv` = slot 0 and `lp` = 0 (all
slots shift right). Delete alone is the same with `rmv` = the matched slot.
Delete + push-first is the "towards the head" form with `ins` all ones
(destination slot 0) and `rmv` = the matched slot, or none. Push + pop is a
push with `rmv` = slot 0.

## Timing

Every operation in every block takes four cycles:

| cycle | phase          | what happens |
|-------|----------------|--------------|
| 1     | enable         | the operation is on the block's inputs; it is registered |
| 2     | compare        | operands broadcast, slot flags and the next-head comparison registered (pop and push-first compare nothing, but wait the same cycle) |
| 3     | set and shift  | slots updated; the interface register captures what to pass on, including the old last element |
| 4     | finish         | the interface register presents the passed-on operation; this is the next block's enable cycle |

So an operation advances one block every three cycles, and a command has
finished everywhere at most 3N + 1 cycles after it entered. Commands are
pipelined: a block only needs the next block to be up to date when it
compares. Block k compares the second command in cycle `t + I + 1` (`I` is
the issue interval); block k+1 updated its slots for the first command at
the end of cycle `t + 5`. Hence `I >= 5`: one command every five cycles. This
holds at every depth because operations keep their spacing as they travel.
With a four-cycle interval a block compares against a neighbour that is
still shifting and the blocks lose their order; in the randomized test this
shows up within a few thousand cycles as a set enable that is no longer
one-hot.

The head (slot 0 of block 0) is final three cycles after a command enters and
stays valid whenever `op_ready_o` is high.

## Top-level interface (`timer_queue`)

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset, which empties the queue |
| `op_valid_i` | in | 1 | a command is offered |
| `op_code_i` | in | `tq_pkg::op_e` | `OP_PUSH`, `OP_POP`, `OP_DELETE` |
| `op_id_i` | in | `ID_W` | ID for push and delete (0 is not allowed) |
| `op_data_i` | in | `DATA_W` | DATA for push |
| `op_ready_o` | out | 1 | the command is taken on this edge if valid (high one cycle in five, or until a command comes) |
| `head_valid_o`, `head_id_o`, `head_data_o` | out | 1, `ID_W`, `DATA_W` | peek: the head |
| `deq_valid_o`, `deq_id_o`, `deq_data_o` | out | 1, `ID_W`, `DATA_W` | the element a pop removed, one cycle after the pop was taken (ID 0: queue was empty) |
| `drop_valid_o`, `drop_id_o`, `drop_data_o` | out | 1, `ID_W`, `DATA_W` | an element that no longer fits: a push into a full queue drops the lowest-priority element at the tail, about 3N cycles later |

Parameters: `N` (blocks, default 32), `M` (slots per block, default 8), `ID_W`
(default `$clog2(N*M)` = 8), `DATA_W` (default 16), `ISSUE_INTERVAL`
(default 5; do not lower it). The defaults are the 256-entry configuration for
which the reference design reports 469 MHz on a Virtex UltraScale+ FPGA.

A timer application compares `head_data_o` with its clock and pops the head
when it has expired; that comparator is not part of this RTL.

## Sizes

The architecture is meant to be resized through the four parameters. The
configurations for which the reference design reports FPGA results:

| depth | N   | M  | ID width | DATA width | fits the default build? |
|-------|-----|----|----------|------------|--------------------------|
| 256   | 32  | 8  | 8        | 16 | yes, it is the default |
| 640 ... 4096 | 80 ... 512 | 8 | 9 ... 11 (as reported) | 16 | no: set `N`, `ID_W` (640, 1024 and 4096 simulated) |
| 128 ... 512 | 32 | 4 ... 16 | 9 | 16 or 64 | no: set `M`, `ID_W`, `DATA_W` (128/64-bit, 320, 512/64-bit simulated) |

For depths 640 to 4096 the reported ID widths are one less than
`$clog2(depth)`; this RTL uses `$clog2(N*M)` by default and any `ID_W` can be
given. Note that ID 0 marks an empty slot, so with `ID_W = $clog2(N*M)` at most
`N*M - 1` distinct IDs exist and a full queue cannot be reached; choose a
wider `ID_W` if every slot must be usable.

The 256-entry default synthesises (generic, before technology mapping) to
about 9,400 flip-flops: N*M*(ID_W + DATA_W) = 6,144 in the slots, the rest in
the per-block operation, flag and interface registers.

## Files

| file | contents |
|------|----------|
| `rtl/tq_pkg.sv` | command and phase enums, default issue interval |
| `rtl/tq_shift_block.sv` | one slot: hold register, three comparators, set/left/right mux |
| `rtl/tq_control.sv` | flag registers and the set/shift encoding, forwarding decision |
| `rtl/tq_interface_reg.sv` | register carrying operations to the next block |
| `rtl/tq_systolic_block.sv` | M slots + controller + interface register, four-phase sequencing |
| `rtl/timer_queue.sv` | top: N blocks, command intake, head, dequeue and drop outputs |
| `tb/tq_ref_pkg.sv` | reference model (sorted list) used by the queue testbenches |
| `tb/tq_e2e_check.sv` | one self-driving end-to-end check at a given size, used by `tb_timer_queue_tables` |
| `tb/tb_*.sv` | one self-checking testbench per module, plus a full-size one |

## Verification

Every testbench is self-checking and ends with a line
`TB_RESULT checks=<n> failures=<n>`.

* `tb_tq_shift_block`: comparator flags and mux against their definitions.
* `tb_tq_control`: the two worked examples bit for bit, then random flag
  patterns against a reference that finds positions with loops instead of
  the subtract/XNOR encoding.
* `tb_tq_interface_reg`: capture, element mux, one-cycle valid.
* `tb_tq_systolic_block`: one block with the testbench playing everything
  downstream; after every operation the block plus the downstream list must
  equal a sorted-list model. Includes the worked examples, the next-head
  comparison case, the three-cycle forwarding latency, and counts each kind of
  forwarded operation.
* `tb_timer_queue`: 4 blocks of 4 slots with 6-bit IDs (so the queue can
  overflow), about 6,500 random commands against the model: peek before every
  command, the head three cycles after it, every dequeued element, the
  five-cycle cadence, every dropped element, and a final drain in order. It counts the mechanisms (updates in
  both directions, updates crossing blocks either way, push-first carries,
  placement by the next-head comparison, equal-DATA ties, overflow, delete
  hits and misses, dequeue of an empty queue) and fails if any never occurs.
* `tb_timer_queue_full`: the same at the default size (256 entries), filled
  with 255 IDs, then about 1,500 mixed commands, more than twice the depth.
* `tb_timer_queue_tables`: six queues side by side (`tq_e2e_check` each), at
  the other sizes in the table of the Sizes section: depth 640, 1024 and 4096
  with M = 8, and depth 512, 320 and 128 with N = 32 and 9-bit IDs, two of
  them with 64-bit DATA; each gets more than twice its depth in commands. The
  4096-entry queue makes this the slow one: a few minutes, almost all of it
  compiling the C++ model.

To run one with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb rtl/tq_pkg.sv tb/tq_ref_pkg.sv \
    tb/tb_timer_queue_full.sv --top-module tb_timer_queue_full -o sim
./obj_dir/sim
```

Verilator finds the other modules by file name through `-Irtl`. The
full-size run takes a few seconds. Testbenches read the slot arrays of a
block hierarchically (`dut.slot_id[i]`), so renaming those signals needs the
testbench changed too.

## Where this RTL departs from or adds to the reference design

* **Eq. for the right-shift thermometer.** The reference writes the top bit of
  `lp` as a constant one. With a constant one an updated element that belongs
  in a later block would stay in its block, so the top bit here is the
  comparison with the next block's first element, which the reference
  describes separately; for the tail block it is always one.
* **Pop, delete and push-first encodings** are only said to be "similar" in
  the reference; the forms above are this design's.
* **Delete + push-first in a block that does not hold the ID** is not spelled
  out; it is treated like a push that found its place (insert at slot 0, pass
  on delete + push-first of the evicted element).
* **Push + pop arriving at a block with no place for the element** is passed
  on as push + pop; the reference says only that a pop does not travel on
  after a push, which here holds in the sense that a pop never travels alone.
* **Empty slots**: the reference marks them with ID 0; how they compare is not
  given. Here they compare as larger than any DATA.
* **Updates with equal DATA** place the element behind existing equal
  elements, as a fresh enqueue would.
* **Command interface, dequeue port, overflow**: not given by the reference.
  The valid/ready intake, the registered dequeue result and the drop port are
  this design's. The reference states the capacity (N*M) but not what a push
  into a full queue does; here the lowest-priority element leaves.
* **Timing**: the four phases per block and the five-cycle interval are the
  reference's; which cycle a block's outputs are registered in, and that the
  next block's first phase coincides with the finish phase, are this design's
  reading.
* **Reset polarity** (active low) is this design's; asynchronous reset is the
  reference's.
* Not included: the external timer and expiry comparator that would sit on the
  head outputs, and any FPGA-specific timing constraints. No frequency or
  resource figures were measured for this RTL.
