# Heapsort in hardware with a k-ary heap

This design sorts a list of unsigned numbers in place, in an on-chip memory,
using Heapsort. A state machine first inserts every element of the list into a
hardware max-heap. It then takes the largest element out again and again,
writing each one back into the memory. The heap module does the real work. It
is a *k-ary* heap: every node has K children, not two. The tree order K is a
parameter, and the hardware turns a wider tree into parallelism in two places:

* **Memory layout.** The heap's storage is split into K banks, one per child
  position. All K children of a node sit in the same row of the K banks, so
  one read returns all of them in one cycle.
* **Finding the largest child.** A tournament tree compares the K children
  in pairs and halves the field every cycle. The winner is known after
  log2(K) cycles instead of K.

A wider heap is also shallower (log_K n levels instead of log_2 n), so each
insert or remove crosses fewer levels. Each level costs a little more in
return. The main configuration is the ordinary binary heap (K = 2), sized for
lists of up to 16384 elements of 32 bits. K can be any power of two from 2 to
at least 128.

The method follows a published case study that compares the time and energy
of Heapsort in software and on an FPGA. That study describes the heap module,
its banked memory, the tournament and the state machine at block level. The
cycle-level behaviour, the interfaces, the element width and every other
detail here belong to this design. Where it departs from the study is listed
in [Departures from the original description](#departures-from-the-original-description).

## Where every node lives

Nodes are numbered in the usual heap order. Node 0 is the root. The children
of node p are nodes K·p+1 … K·p+K, and the parent of node n > 0 is
(n−1) div K.

* The **root** is kept in a register, not in a bank. The current maximum is
  therefore always visible, with no read.
* Every other node n is stored in **bank (n−1) mod K, row (n−1) div K**.

The row number of a node is simply its parent's number. So row p, read
across all K banks, is exactly the set of children of node p, with child j in
bank j. For K = 4:

| row (= parent) | bank 0 | bank 1 | bank 2 | bank 3 |
|---|---|---|---|---|
| 0 | node 1 | node 2 | node 3 | node 4 |
| 1 | node 5 | node 6 | node 7 | node 8 |
| 2 | node 9 | node 10 | node 11 | node 12 |

A single node n > 0 is read by giving row (n−1) div K to every bank and
taking the output of bank (n−1) mod K. A single node is written by enabling
only that bank. Each bank has one synchronous read port and one write port
(`heap_bank`). A heap of capacity C needs ceil((C−1)/K) rows per bank, plus
the root register: 8192 rows of 32 bits in each of 2 banks for the default.
For K a power of two, every div and mod above is a shift or a mask.

The last row in use may be only partly filled. A *mask* marks which children
of the current node exist (node number < element count). Missing children
never win the tournament.

## Insert and remove, cycle by cycle

Both operations use a *hole*. The moving element is held in a register. At
each step only the node that makes way is written: into the hole, which then
moves to where that node was. When the element finds its place it is written
into the hole. The resulting heap is the same as swapping the element with
its parent (or largest child) at every step, as the textbook algorithm does.
The hole just needs one memory write per step instead of two.

**Insert** (sift up). The hole starts at node `count`, the first free node.

| cycle | state | action |
|---|---|---|
| 0 | `S_IDLE` | command accepted, count + 1. If the heap was empty, the value goes straight into the root and the insert is finished. |
| 1 | `S_UP_READ` | read the parent of the hole (no read if the parent is the root register) |
| 2 | `S_UP_CMP` | if parent < element: write the parent into the hole, hole ← parent, back to `S_UP_READ`. Otherwise write the element into the hole and finish. |
| | `S_UP_READ` with hole = 0 | the element has risen to the root: write it into the root register and finish |

Cost: 2 cycles per level risen, plus 1 or 2 cycles. Random data seldom rises
far. An ascending list rises to the root every time, which is why sorted input
is the slowest case.

**Remove** (sift down). The command takes the element shown on `max_data`.

| cycle | state | action |
|---|---|---|
| 0 | `S_IDLE` | command accepted, count − 1, read the row of the last element |
| 1 | `S_REM_LAST` | the last element becomes the moving element, hole ← root |
| 2 | `S_DOWN_READ` | if the hole has no children: write the element into the hole and finish. Otherwise read row `hole` (all its children). |
| 3 | `S_DOWN_TREE` | the K children and their mask enter the tournament |
| 4 … 3+log2 K | `S_DOWN_WAIT` | when the winner appears: if it is larger than the element, write it into the hole, hole ← winner's node, back to `S_DOWN_READ`. Otherwise write the element into the hole and finish. |

Cost: 2 cycles, plus (2 + log2 K) per level visited that has children, plus
1 cycle at a leaf. An element moves only when it is strictly smaller than its
parent or largest child, so equal values stay where they are.

The heap takes a new command only while it is idle (`cmd_ready`). A command
is a valid/ready handshake with an operation (`HEAP_INSERT` or `HEAP_REMOVE`)
and data. Assertions check three rules: the command must hold steady while
waiting, the heap must not be full on an insert, and it must not be empty on
a remove. If such a command reaches the hardware anyway, it is ignored.

## The tournament

`max_tree` holds its 2K−1 nodes in heap order. Nodes K−1 … 2K−2 are the
incoming candidates. Each other node is a register that takes the larger of
its two children on every clock edge. A node is empty if both of its children
are masked. On a tie the lower index wins.

Each round is therefore one register stage. The result belongs to the input
given exactly log2(K) cycles earlier. The tree accepts a new set of
candidates every cycle, though the heap uses it only once per level. The
winner's index, counted from the first child, gives the node the hole moves
to.

## The sorting sequence

`heapsort_ctrl` sequences a sort of `size` elements. It has no data path of
its own: the heap's insert data is wired straight to the memory's read data,
and the memory's write data to the heap's maximum.

1. **Insert phase.** On `start`, word 0 is read. Each insert is issued as
   soon as the heap is ready. In the cycle the heap accepts it, the next word
   is read. Memory read data holds until the next read, so the read overlaps
   the heap's work.
2. **Remove phase.** Removes are issued as soon as the heap is ready. In the
   same cycle the current maximum is written to address `size−1`, then
   `size−2`, … down to 0. The memory ends in ascending order.
3. `done` pulses for one cycle, one cycle after the last remove. `busy` is
   high from the cycle after `start` until `done`.

A sort therefore takes exactly the heap's own cycles plus 2. That count
depends only on the list, not on what the memories held before, so one
simulation gives the exact run time for a list.

`onchip_mem` is a true dual-port RAM. Port A belongs to the state machine.
Port B (`host_*` on the top) is used to load the list before a sort and to
read the result after it. The host must not write while `busy` is high (an
assertion checks this).

## Top-level interface (`heapsort_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous reset, active low (empties the heap, stops the state machine) |
| `start` | in | 1 | one-cycle pulse starts a sort (ignored while busy) |
| `size` | in | log2(CAPACITY+1) | number of elements, from address 0 |
| `busy`, `done` | out | 1 | sort running; one-cycle pulse at the end |
| `host_en`, `host_we` | in | 1 | host access to the memory; write when `host_we` |
| `host_addr` | in | log2(CAPACITY) | word address |
| `host_wdata` | in | WIDTH | word to write |
| `host_rdata` | out | WIDTH | word read, valid the cycle after the read, held until the next host read |

Parameters (defaults in `heapsort_pkg`): `K` = 2 (power of two, ≥ 2),
`WIDTH` = 32, `CAPACITY` = 16384. Elements compare as unsigned numbers.

## Measured cycle counts

These are from simulation at the default configuration. The second column is
what a 100 MHz clock makes of the cycle count. The third is the time measured
on an FPGA at 100 MHz for the original K = 2 design, on random lists of the
same sizes. That design used its own, slower cycle budget.

| elements | random, cycles | random, ms | original, ms | ascending, cycles | descending, cycles |
|---|---|---|---|---|---|
| 4096 | 151 157 | 1.51 | 5.386 | 217 158 | 141 249 |
| 8192 | 327 162 | 3.27 | 11.665 | 475 211 | 306 749 |
| 16384 | 703 483 | 7.03 | 25.138 | 1 032 272 | 663 127 |

Sweeping K on random lists (cycles, same list for every K):

| elements | K=2 | K=4 | K=8 | K=16 | K=32 | K=64 | K=128 |
|---|---|---|---|---|---|---|---|
| 4096 | 151 157 | 111 920 | 99 234 | 93 246 | 93 077 | 87 941 | 93 533 |
| 16384 | 703 226 | 513 449 | 454 714 | 429 996 | 417 094 | 412 552 | 387 710 |

Every K above 2 is faster than the binary heap. Which K is fastest depends on
how the list size falls against the levels of the tree. With this cycle
budget, K = 64 wins up to about 8192 elements and K = 128 wins above that. The
original study found K = 128 fastest for every size. Counts for random data
vary by a few hundred cycles with the data. Energy cannot be simulated here.

## Departures from the original description

* **Cycle budget.** The original gives only total run times. This design's
  per-level costs are its own, and it is about 3.5 times faster at K = 2.
* **Node compared after the tournament.** The original finds "the maximum
  between a node and its children" with the reduction tree. Here the tree
  finds the largest child, and the node is compared with it in the following
  cycle, together with the write.
* **Hole instead of swaps.** Same resulting heap, fewer memory writes (see
  above).
* **Root in a register.** The original does not say where the root is
  stored. The register makes the maximum readable with no read.
* **Loading the list.** In the original the list appears to be built into
  the design. Here a second memory port loads it and reads the result.
* **Sorted direction.** The original says only "in sorted order". Here the
  result is ascending, smallest at address 0.
* **Not specified in the original, chosen here:** the element width (32-bit
  unsigned), the reset (asynchronous, active low), the interfaces and
  handshakes, and the memory port structure.
* **Not part of this RTL:** the 100 MHz board clock, which is an input. The
  software Heapsort and the power estimates belong to the study, not to the
  design.

## Files

| file | contents |
|---|---|
| `rtl/heapsort_pkg.sv` | default sizes, `heap_op_e` command type |
| `rtl/heap_bank.sv` | one bank of the heap's storage |
| `rtl/max_tree.sv` | the pipelined tournament |
| `rtl/heap.sv` | the K-ary max-heap: banks, tournament, insert/remove control |
| `rtl/onchip_mem.sv` | dual-port memory holding the list |
| `rtl/heapsort_ctrl.sv` | the sorting state machine |
| `rtl/heapsort_top.sv` | the whole design |
| `tb/tb_*.sv` | self-checking testbenches, one per module, plus two that run the evaluation's lists |
| `tb/heapsort_tasks.svh` | load / sort / check tasks shared by the end-to-end testbenches |

## Simulating

Every testbench checks itself and ends with a line
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl \
    rtl/heapsort_pkg.sv tb/tb_heapsort_top.sv --top-module tb_heapsort_top
./obj_dir/Vtb_heapsort_top
```

Replace `tb_heapsort_top` with any testbench name:

| testbench | what it runs | time |
|---|---|---|
| `tb_heap_bank`, `tb_onchip_mem` | random reads/writes against an array model, exact read timing | < 1 s |
| `tb_max_tree` | K = 2, 8, 128; random masked sets every cycle; latency exactly log2 K | < 1 s |
| `tb_heap` | K = 2, 4, 8, capacity 50; fill, drain, random mix against a list model; per-command cycle bounds | < 1 s |
| `tb_heapsort_ctrl` | state machine against a heap model with random busy times; no idle cycles, exact `done` timing | < 1 s |
| `tb_heapsort_top` | default configuration, lists of 0 to 16384 elements; cycle bounds; counts each mechanism (rise, rise to root, sink, masked children, read-ahead, remove+write) and fails if one never happened; the same list sorted twice takes the same cycles | ~1 s |
| `tb_heapsort_workloads` | all sizes 4096 … 16384 in steps of 2048, random / ascending / descending; random lists must not be slower than the original | ~5 s |
| `tb_heapsort_kvalues` | K = 2 … 128 on the same random lists of every size | ~15 s |

Add `+verilator+rand+reset+2` to the run to start every register that reset
does not touch at a random value. The testbenches pass either way.

## Changing it

* **K** must be a power of two. Each doubling adds one tournament round (one
  cycle per level of a remove), doubles the width of a row read, and widens
  the multiplexer that picks one bank's output for a single-node read.
* **CAPACITY** need not be a power of two. The memory is CAPACITY words and
  the heap is CAPACITY−1 bank slots plus the root.
* **WIDTH** is free. To sort records by a key, widen WIDTH and put the key in
  the top bits.
