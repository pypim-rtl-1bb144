# A partitioned memristive processing-in-memory memory, in SystemVerilog

In a memristive crossbar, the cells that store data can also compute: applying two
fixed voltages to three bitlines performs a NOR of two cells into a third one, in
every row of the array at once. Splitting each row with transistors into N
*partitions* lets up to N such gates run per row per cycle, and an array of thousands
of crossbars that all receive the same operation turns a single micro-operation into
millions of bit operations. What such a memory needs around the cells is a
micro-architecture that says, compactly, *which* crossbars, rows, partitions and
columns take part in each operation, and a way to move data between crossbars.

This RTL implements that micro-architecture: a memory of 4^XB_LEVELS crossbars of
H x W cells with N partitions, driven by a stream of 64-bit micro-operations from a
host, with an H-tree joining the crossbars. It contains no arithmetic units. Addition,
multiplication and the rest are sequences of micro-operations that a host driver
generates. `tb/tb_pim_top.sv` shows an 8-bit ripple-carry adder built this way.

Default sizes are 1024 x 1024 cells per crossbar, N = 32 partitions, 32-bit words and
256 crossbars. The memory this design is modelled on has 65,536 crossbars (8 GB). See
"Sizes" below.

## Data layout: words are strided across partitions

Partition p holds columns p*(W/N) to p*(W/N) + W/N - 1. An N-bit word at
*intra-partition index* i of a row has its bit j in partition j, at column
j*(W/N) + i. A row therefore holds W/N words, or "registers". The same index i
addresses one column in every partition. Because of this layout:

* one mux and one sense amplifier per partition read a whole word;
* a gate applied at the same index in all partitions works on all N bits of a word
  at once.

The host-visible memory is crossbars x rows x registers, with one 32-bit word in each.

## The micro-operations

Every operation is 64 bits. Its top three bits give the type; a move uses only the top
two bits (`11`). The field widths are fixed. Their packing from bit 63 downward is this
implementation's choice. `rtl/pim_pkg.sv` declares each layout as a packed struct.

| type | code | fields (MSB first, widths) |
|---|---|---|
| crossbar mask | 000 | start 16, stop 16, step 16, unused 13 |
| row mask | 001 | start 10, stop 10, step 10, unused 31 |
| read | 010 | index 5, unused 56 |
| write | 011 | index 5, immediate 32, unused 24 |
| horizontal logic | 100 | gate 2, InA 5, pA 5, InB 5, pB 5, Out 5, pOUT 5, pEND 5, pSTEP 5, unused 19 |
| vertical logic | 101 | gate 2, input row 10, output row 10, index 5, unused 34 |
| move | 11 | src row 10, src index 5, dst row 10, dst index 5, dst crossbar 16, unused 16 |

Gate codes: INIT0 = 00, INIT1 = 01, NOT = 10, NOR = 11.

**Masks.** A mask selects the range {start, start+step, ..., stop}.

* Crossbar mask: every crossbar compares its own index with the range and stores one
  *active* bit. An inactive crossbar ignores every following non-mask operation,
  except when it is a move destination.
* Row mask: every crossbar stores start/stop/step and expands them into an H-bit row
  enable for reads, writes and horizontal logic. Rows that are not enabled are
  isolated.

Both masks reset to "everything enabled".

**Read and write.** A read expects the masks to select exactly one crossbar and one
row. The word goes up the H-tree to the controller. A write puts the immediate word at
the given index in every selected row of every active crossbar. This is how constants
are broadcast.

## Horizontal logic: half-gates and the partition model

This is the part that needs the most care.

**What a gate does.** A stateful gate drives input voltage V1 on its input bitlines
and output voltage V2 on its output bitline. The gate works in every enabled row, and
only inside a *section*: a run of partitions joined by conducting transistors. The
array model (`pim_crossbar_array`) follows MAGIC NOR. The output cell must first be
set to 1 with an INIT1 operation. The gate then clears the output if any input cell
in its section is 1: `out <= out & ~OR(inputs)`. NOT is the one-input case. The
sequence that computes NOR(a, b) into c is therefore:

1. INIT1 to c;
2. NOR from a and b to c.

**Half-gates.** Each partition has one column decoder with two input decoders (InA,
InB) and one output decoder (Out). A 3-bit opcode enables them:

* bit 2 enables InA;
* bit 1 enables InB;
* bit 0 enables Out.

A gate whose inputs are in partition 0 and whose output is in partition 1 is made of
two half-gates. Partition 0 gets opcode `110` and drives only the inputs. Partition 1
gets `001` and drives only the output. The transistor between them conducts. The
indices InA, InB and Out are the same in every partition.

**Encoding many gates in one operation.** The operation does not list N opcodes. It
describes the leftmost gate: input partitions pA <= pB, output partition pOUT, and the
three intra-partition indices. It also gives a period pSTEP and the partition pEND
that holds the last gate's output. Gate j uses partitions pA + j*pSTEP, pB + j*pSTEP
and pOUT + j*pSTEP, for j = 0 to (pEND - pOUT)/pSTEP. `pim_halfgate_gen` expands this
into per-partition opcodes. It also derives the transistor selects: the transistor
between partitions k and k+1 is opened only when partition k is the right end of a
gate, or partition k+1 is the left end of a gate. All others conduct.

| pattern | example fields | result |
|---|---|---|
| parallel | pA = pB = pOUT = 0, pSTEP = 1, pEND = N-1 | one gate in every partition, all transistors open |
| serial | pA = 0, pOUT = 31, one gate | the whole row is one section |
| semi-parallel | pA = pB = 0, pOUT = 1, pSTEP = 2, pEND = 3 | opcodes `110 001 110 001`, transistors 1 0 1 |

The gate type masks the opcodes: NOT uses only InA, and INIT uses no inputs. A pSTEP
of 0 means a single gate.

**Where this departs from the published rule.** The published transistor rule takes
InA as the left end of a gate and the output as its right end, and calls the mirrored
case (output left of the inputs) "similar". Here, the left end is min(pA, pOUT) and
the right end is max(pB, pOUT). This matches the published rule whenever
pA <= pB <= pOUT.

## Vertical logic

INIT0, INIT1 and NOT can also run along the columns, from one row to another. They
act on the N columns at one intra-partition index, one column per partition, and they
ignore the row mask. Two vertical NOTs copy a word between rows. A vertical operation
with the NOR code does nothing.

## Moving data between crossbars: the H-tree

Crossbars are numbered so that a group of 4^l crossbars shares all base-4 digits of
its index except the lowest l. For example, group 10xx is 1000, 1001, 1010 and 1011.
Each group has a bus with a switch to its parent's bus (`pim_htree`). The controller
picks an *isolation level*. Groups at that level are cut off from their parents, so
each one carries its own transfer in parallel with the others.

A move works in three steps:

1. The host sets the crossbar mask to the source crossbars: start, step, stop, with
   the step a power of four.
2. The host sends the move. It gives the source row and index, the destination row and
   index, and the destination of the *first* source. The distance is therefore
   non-negative.
3. In one cycle, every source puts its word on its group's bus, and crossbar
   `source + distance` writes it.

The controller derives two things:

* **Distance.** The controller keeps a copy of the last crossbar mask. From it, it
  computes the distance and broadcasts the destination range, and each crossbar
  checks whether it is a destination.
* **Isolation level.** The level is log4(step) when several crossbars send, and the
  root when a single crossbar sends. A source and its destination must be in the same
  isolated group. An assertion checks that a multi-source move has a power-of-four
  step. The destination test and the level rule are this implementation's choices.

Read data reaches the controller over the root of the same tree.

## Controller and timing

The host driver has already turned every instruction into periphery-level fields, so
the controller (`pim_controller`) does only three things:

* buffers operations in a 16-entry FIFO (`pim_op_fifo`);
* decodes one operation per cycle into a `pim_bcast_t` broadcast register;
* captures read data.

Timing, as checked by the testbenches:

* the host offers `op` with `op_valid` and must hold it until `op_ready`, which an
  assertion checks;
* an operation accepted at clock edge *e* is broadcast in the cycle after *e* and
  takes effect in all crossbars at edge *e+2*;
* a read response appears on `resp_valid`/`resp_data` one cycle later;
* back-to-back operations run at one per cycle.

One micro-operation per cycle is the cost model of the design this follows.

## Module map

| module | role |
|---|---|
| `pim_pkg` | operation formats, gate and kind enums, broadcast struct, range function |
| `pim_top` | controller + H-tree + crossbars; host ports only |
| `pim_controller`, `pim_op_fifo` | buffering, decoding, move bookkeeping, read response |
| `pim_htree` | hierarchical bus with level-controlled isolation |
| `pim_crossbar` | one tile: masks, opcode generator, column decoders, array, H-tree endpoint |
| `pim_xb_mask`, `pim_row_mask` | activation bit; stored row range and its expansion |
| `pim_halfgate_gen`, `pim_col_decoder` | partition opcodes and transistor selects; per-partition bitline selects |
| `pim_crossbar_array` | cell array with stateful logic, strided read/write |

## What is modelled and what is not

* Memristors, voltage drivers (V1, V2, V_iso) and sense amplifiers are replaced by
  their logical effect. Cells are flip-flops, stored column by column so that one
  operation touches all rows at once. Device non-idealities, write endurance and
  analog timing are not modelled.
* Each crossbar expands its row mask with one range comparator per row, which is large
  in gates. The expansion circuit is not specified by the source design.
* The library and host driver that generate micro-operations are software and not
  included. The testbenches encode operations directly.

## Sizes

`pim_top` defaults to XB_LEVELS = 4, which is 256 crossbars, instead of the original
8 (65,536 crossbars, 8 GB). At 65,536 instances, Verilator's lint ran out of 16 GB.
Its memory grows about fourfold per H-tree level: 0.6 GB for 16 crossbars and 2.3 GB
for 64. Every other size is the original one: H = W = 1024, N = 32, 32-bit words,
16-bit crossbar and 10-bit row fields. The format supports up to 65,536 crossbars.

Simulation limits:

* Building a simulation of the default 256-crossbar top also exceeded 16 GB, so no
  testbench runs the top at its defaults.
* The end-to-end test uses 16 crossbars of 16 x 128 cells with 8 partitions. The
  crossbar-level tests use smaller arrays as well; all logic is size-parameterised.

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself with a
watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/pim_pkg.sv tb/tb_pim_top.sv --top-module tb_pim_top -o sim
./obj_dir/sim
```

| testbench | what it checks |
|---|---|
| `tb_pim_top` | 16 crossbars: data load, NOR ripple-carry adder on crossbars 0..14 with crossbar 15 masked off, semi-parallel and vertical NOT, group and root moves; it counts each mechanism |
| `tb_pim_controller` | field decode of every type, move range and level, 13 operations in 13 cycles, read latency |
| `tb_pim_crossbar`, `tb_pim_crossbar_array` | tile and array against a cell-level reference with random sections |
| `tb_pim_halfgate_gen`, `tb_pim_col_decoder`, `tb_pim_xb_mask`, `tb_pim_row_mask`, `tb_pim_htree` | the small units |

To build on this design:

* Larger memories: raise `XB_LEVELS`.
* Other array shapes: change `H`, `W` and `N`. The operation format assumes at most
  1024 rows, 32 columns per partition and 32 partitions.
