# Ternary associative processor: in-place vector addition inside a multi-valued CAM

An associative processor (AP) computes inside a content-addressable memory (CAM)
and does not move data out to an ALU. Every row of the CAM holds one operand
set. An operation is a fixed sequence of two primitives, each applied to all rows
at once:

* **compare**: a key is matched against selected columns of every row. Each row
  that matches sets its *Tag* bit.
* **write**: new values go into selected columns of every tagged row.

Any function with a truth table can be computed this way, one digit position at
a time. Each entry of the table becomes a *pass*: compare against the entry's
inputs, then write its outputs. The run time depends on the number of passes and
digits, not on the number of rows. So a 512-row array does 512 additions in the
time of one.

This RTL implements the multi-valued form of this idea (MvAP). Its main instance
is a **ternary AP (TAP)**. Each CAM cell stores a trit (0, 1 or 2) or "don't
care". The processor adds two 20-trit vectors in place in every row: the sum
overwrites operand B and the carry goes to a dedicated carry cell. The CAM cell,
row, array and search decoder take the radix as a parameter. The sequencer and
its tables are specific to the ternary full adder.

The architecture, the cell and decoder behaviour, the adder's pass tables and
the cycle accounting follow the paper "In-memory Multi-valued Associative
Processor" (Hout, Fouda, Kanj, Eltawil). The controller's insides, the I/O port
and the reset behaviour are this implementation's own choices. They are marked
as such below and in the file headers.

## Contents

| file | what it is |
|---|---|
| `rtl/tap_pkg.sv` | shared types: operation code, LUT-entry struct, pass counts |
| `rtl/search_decoder.sv` | key/mask to search-line decoder of one column |
| `rtl/mvcam_cell.sv` | nTnR multi-valued CAM cell (3T3R for ternary) |
| `rtl/mvcam_row.sv` | one row: cells, match line, Tag latch, blocked-mode write-enable flip-flop |
| `rtl/mvcam_array.sv` | ROWS x COLS array with one decoder per column, host load/read port |
| `rtl/tfa_lut_rom.sv` | pass tables of the in-place ternary full adder (non-blocked and blocked) |
| `rtl/tap_controller.sv` | sequencer; holds the Key and Mask registers |
| `rtl/tap_top.sv` | the processor: controller plus array |
| `tb/tb_*.sv` | self-checking testbenches, one per module, plus the workload test |
| `tb/tap_workload_run.sv` | helper used by `tb_tap_workloads` |

## The multi-valued CAM cell

A cell for radix *n* has *n* resistive elements M_0..M_{n-1}. Each element sits
in series with a transistor. The transistors connect the row's match line to
ground, and search line S_j drives the gate of transistor j.

* **Storage.** Value *i* is stored by putting M_i in the low-resistance state
  (LRS) and all other elements in the high-resistance state (HRS). All elements
  in HRS means "don't care". In the ternary cell, (M2, M1, M0) = (H, H, L) is 0,
  (H, L, H) is 1, (L, H, H) is 2 and (H, H, H) is "don't care".
* **Compare.** A search for value *i* pulls S_i low and drives every other line
  high. The precharged match line then drains quickly if any element in LRS has
  its line high. So a cell reports a match when it holds *i* or "don't care",
  and a mismatch otherwise. A masked column drives all its lines low and never
  discharges anything. The RTL keeps the element states as a bit vector `lrs`
  and computes the match as `~|(s & lrs)`. The paper's prose says a match
  needs M_i in LRS, but its circuit gives no discharge path for an all-HRS
  cell. The RTL follows the circuit, so a don't-care cell matches any key,
  as in any ternary CAM.
* **Write.** Changing a value resets the old LRS element and sets the new one.
  Leaving "don't care" needs only one set. Rewriting the same value programs
  nothing. The cell shows the elements it programs in a write cycle on
  `set_o`/`reset_o`. The array counts these events (`nset_o`, `nreset_o`), and
  the counts give the write energy: the paper's estimates use about 1 nJ per
  set or reset.

The memristors are not modelled as analog devices. Their resistance (20 kΩ /
1 MΩ in the paper's design point), the match-line voltages and the sense margin
have no counterpart here.

## The search decoder

Each column gets its search lines from a decoder fed by that column's Key nit
and Mask bit. When the column is unmasked, the decoder drives the key's line low
and all others high. When it is masked, all lines are low. The output is
inverting: the low line marks the value searched for.

For radix 3 the decoder is written as the ternary gate network. It uses the
positive ternary inverter PTI (0→2, 1→2, 2→0) and the negative ternary inverter
NTI (0→2, 1→0, 2→0):

```
S2 = Mask & PTI(Key)
S1 = Mask & (NTI(Key) | ~PTI(Key))
S0 = Mask & ~NTI(Key)
```

PTI and NTI only produce the levels 0 and 2, so every line is a single bit, with
1 meaning V_DD. For other radices the decoder uses the general rule
`S_j = Mask & (Key != j)`. For that case the paper only suggests a modified
successive-approximation ADC; the comparison above is this design's own logic
equivalent of it.

| Mask | Key | S2 S1 S0 |
|---|---|---|
| 0 | x | 0 0 0 |
| 1 | 0 | 1 1 0 |
| 1 | 1 | 1 0 1 |
| 1 | 2 | 0 1 1 |

## Rows, Tag bits and the blocked write enable

A row is COLS cells on one match line. It matches only when every cell matches.
In silicon the row has a precharge device, a sense amplifier and a latch. In the
RTL the row's match is the AND of its cells' match outputs, and the latch is the
Tag flip-flop `tag_q`, loaded on every compare.

A second flip-flop per row, `we_q`, supports the blocked approach (see below).
A matching compare sets it, and only a write clears it. It therefore collects
the matches of several compares. A write selects rows through `tag_q` in
non-blocked mode and through `we_q` in blocked mode.

The paper clocks this flip-flop with the Tag bit itself. Here it is an ordinary
synchronous flip-flop updated alongside the Tag, which gives the same result at
every cycle boundary.

## In-place addition as an ordered list of passes

The adder treats the trits (A_i, B_i, C) of position *i* as a three-trit
*state*. The sum goes to B_i and the carry to C, so every pass moves rows from
one state to another. Two constraints shape the table.

**Order.** A row that has just been rewritten must not match a later pass of the
same digit, or it would be "added" twice. Draw each state as a node with an edge
to the state it is rewritten to. The six states that the addition leaves
unchanged are roots: 000, 010, 020, 201, 211, 221. All other states form trees
that hang from these roots. Correct passes visit every tree from its root
outwards: a state is processed before any state that is rewritten into it.

**Cycles.** Plain addition gives one cycle: 101 → 120 and 120 → 101. This is
broken by also writing A for input 101, so that 101 → 020 (A_i becomes 0). That
pass is the only *3-trit write*. As a result, **operand A is not preserved**: in
rows where position *i* held A_i = 1, B_i = 0 and an incoming carry of 1, A_i
reads 0 after the addition. The sum and carry are always correct.

Both tables visit the same 21 input states. The 27 possible states minus the 6
roots leave 21.

**Non-blocked table.** Each pass is one compare followed by one write, so a
trit takes 42 cycles. The passes, listed as input → output (A B C):

```
 1 001→010   2 012→001   3 021→001   4 212→221   5 202→211   6 222→202
 7 220→211   8 200→220   9 210→201  10 011→020  11 022→011  12 101→020*
13 120→101  14 110→120  15 100→110  16 102→101  17 111→101  18 112→111
19 121→111  20 122→121  21 002→020                        (* 3-trit write)
```

**Blocked table.** Passes that write the same output are grouped. All compares
of a group run back to back, with each matching row remembered in its `we_q`
flip-flop, and a single write closes the group. The table has 9 groups, so a
trit takes 21 compares plus 9 writes, 30 cycles.

```
group 1  W(A,B,C)=0,2,0 : 101
group 2  W(B,C)=0,1     : 102 111 120 210
group 3  W(B,C)=1,1     : 112 121 202 220
group 4  W(B,C)=2,0     : 002 011 110 200
group 5  W(B,C)=2,1     : 122 212
group 6  W(B,C)=1,0     : 001 100
group 7  W(B,C)=0,2     : 222
group 8  W(B,C)=0,1     : 012 021
group 9  W(B,C)=1,1     : 022
```

A row holds only one state at a time, so it matches at most one compare within
a group. Grouping therefore never merges different writes into the same row. The
order of the groups still follows the tree constraint: the children of a state
are only compared after the group that writes that state.

Both tables are derived offline by a graph traversal of the state diagram:
depth-first for the non-blocked table, breadth-first with grouping for the
blocked one. The traversal is a software procedure and is not part of this RTL.
The results are stored in `tfa_lut_rom`.

## Sequencing and timing

`tap_controller` walks positions i = 0 … TRITS-1, least significant first, and
the 21 passes of each position.

* **Compare.** The controller loads the Key register with the pass's input
  triplet in columns A_i, B_i and C, and sets only those three Mask bits.
* **Write.** The controller loads the output trits into the same registers.
  The Mask selects B_i and C, plus A_i for the 3-trit write.

A write cycle is issued whether or not any row matched. Key, Mask and the
operation code are registered, and the array executes each operation in the
following cycle. One compare or one write takes one clock cycle.

| | cycles per trit | 20-trit addition (start edge to `done_o`) | at 2 ns per cycle |
|---|---|---|---|
| non-blocked | 42 | 20·42 + 2 = 842 | 1684 ns |
| blocked | 30 | 20·30 + 2 = 602 | 1204 ns |

The ratio is 1.4. It does not depend on the number of rows. The paper's delay
figures assume 2 ns per operation: 1 ns precharge plus 1 ns evaluate for a
compare, and a write window of the same length. They show the same
≈1.7 µs / 1.2 µs for 20 trits.

The paper also describes an optimized array that precharges the match lines
during a write. A compare that follows a write then costs less than a compare
that follows another compare, and the blocked approach gains only about 1.2x.
That changes the analog timing inside a cycle, not the sequence of operations.
This RTL keeps the plain one-operation-per-cycle timing.

## Using `tap_top`

Parameters: `TRITS` (default 20), `ROWS` (default 512). `COLS` is derived as
2·TRITS+1 = 41 and should not be overridden.

The row layout, least significant trit first:

| columns | content |
|---|---|
| 0 … TRITS-1 | operand A, trit i in column i |
| TRITS … 2·TRITS-1 | operand B; holds the sum afterwards |
| 2·TRITS | carry; must be 0 before start; holds the carry-out afterwards |

Trits travel as 2-bit binary numbers 0..2 on all ports.

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset. Reset sets every cell to "don't care" and clears all Tag and write-enable bits |
| `host_we_i`, `host_row_i`, `host_wdata_i` | in | write one whole row in one cycle. Ignored while `busy_o` is high |
| `host_rdata_o`, `host_rcare_o` | out | combinational read of row `host_row_i`. `rcare` = 0 marks a don't-care cell |
| `start_i`, `blocked_i` | in | start an addition when idle. `blocked_i` is sampled at start (0 = non-blocked, 1 = blocked) |
| `busy_o`, `done_o` | out | busy from the cycle after start. `done_o` pulses once when the results are in the array |
| `tag_o` | out | Tag bits of all rows |
| `nset_o`, `nreset_o` | out | elements set / reset in the current cycle, over the whole array |

To run an addition:

1. Load every row with its operands.
2. Pulse `start_i`.
3. Wait for `done_o`.
4. Read back the B columns (the sum) and the carry column.

The host port does not come from the paper, which gives no I/O path. It is the
simplest one that lets operands be loaded and results read.

## What is and is not modelled

Modelled:

* the cell's storage encoding, match rule and set/reset behaviour;
* the ternary decoder equations and the generic n-ary decoder;
* parallel compare and write over all rows;
* the Tag latch and the blocked-mode write-enable flip-flop;
* both adder tables, including the cycle-breaking 3-trit write;
* the one-operation-per-cycle timing.

Abstracted or left out:

* **Analog circuits.** The precharge device, match-line capacitor, sense
  amplifier and the write-enable transmission gates that carry programming
  voltages are not modelled. Their logical effect is the AND of the cell
  matches and "program only selected cells of selected rows".
* **LUT generation.** The graph algorithms that produce the pass tables run
  offline. Only their output for the ternary full adder is built in. Other
  functions (the paper mentions logic functions, subtraction, multiplication)
  would need a new table.
* **This design's own choices.** The controller's state machine, the
  start/busy/done handshake, the host port, reset to "don't care", ignoring
  host writes while busy, and the set/reset counter outputs.
* **Caller's duty.** The carry column must be cleared before an addition; the
  controller does not clear it.

## Verification

Every testbench checks its module against values computed independently:
arithmetic or tables printed in the paper. Each testbench prints one
`TB_RESULT checks=N failures=M` line.

| testbench | what it checks |
|---|---|
| `tb_search_decoder` | all key/mask pairs of the ternary decoder against its truth table; radix-5 decoder against the general rule |
| `tb_mvcam_cell` | element states of each stored value; match/mismatch for every stored value × key/mask; set/reset actions of every transition |
| `tb_mvcam_row` | 400 random rounds against a software row: match, Tag, write-enable accumulation, masked writes, set/reset counts |
| `tb_mvcam_array` | 16×5 array: Tag vectors, writes in both modes, full read-back, array-wide set/reset counts |
| `tb_tfa_lut_rom` | every pass writes the right sum and carry; every action state appears once; 9 groups; an in-place run of all 27 states is correct in both tables |
| `tb_tap_controller` | operation stream of a 3-trit addition: masks, order of positions, write values, number of compares and writes, exact latency |
| `tb_tap_top` | full size (20 trits, 512 rows, default parameters): one addition per approach on random and corner-case rows (see below) |
| `tb_tap_workloads` | 5, 10, 20, 32, 40 and 80-trit additions (16 rows each, `TRITS` set per size): sums, carries and latency; mean sets per addition within 10 % + 1 of the reference values 5.22, 10.53, 21.02, 33.67, 42.17 and 84.54 |

`tb_tap_top` checks, for each of the two additions:

* every sum trit, the carry-out and the expected A values;
* the latency, 842 and 602 cycles;
* that sets equal resets;
* that the mean sets per addition are near the reference 21.02;
* that each of these happened at least once: don't-care after reset, both
  modes, the 3-trit write, a carry-out, and a host write ignored while busy.

In the full-size run, each 20-trit addition programmed 20.9 sets (and as many
resets) on average. The reference average over 10,000 additions is 21.02.

To simulate with Verilator, from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
    -y rtl -y tb -Irtl -Itb rtl/tap_pkg.sv tb/tb_tap_top.sv --top-module tb_tap_top
./obj_dir/Vtb_tap_top
```

Replace `tb_tap_top` with any other testbench name. At full size the build
unrolls 21,000 cells and compiles for a few minutes. The simulation itself takes
seconds.

## Changing the design

* **Word length and row count.** Set `TRITS` and `ROWS` on `tap_top`. Latency
  is TRITS·42+2 or TRITS·30+2 cycles whatever the row count.
* **Another ternary function.** Provide a new table in the form of
  `tap_pkg::lut_entry_t`. Each entry gives the compared triplet and the written
  triplet; `wr_a` marks a 3-trit write; `wr_after` marks the compare a write
  follows (every compare for a non-blocked table, the last compare of each group
  for a blocked one). Adapt `TFA_PASSES` to the table length.
* **Another radix.** `search_decoder`, `mvcam_cell`, `mvcam_row` and
  `mvcam_array` take `RADIX`. The controller and ROM are ternary-only.
