# ADS-IMC: sorting eight numbers inside an SRAM array

This design sorts data without ever reading it out of memory. It keeps the
numbers in a small SRAM array and uses only one kind of operation: raise two
word lines at once and sense the two bitlines of each column. With a
reference voltage on the sense amplifiers, BL reads the **AND** of the two
cells and BLB reads their **NOR**. The sensed row is written straight back into
the array in the same cycle. Any logic function can be built from these two
gates, given two constant rows (all 0s for NOT, all 1s for COPY). That includes
a magnitude comparator and a 2:1 multiplexer, and together they make a
compare-and-swap (CAS). A Batcher bitonic network of such CAS blocks then sorts
the numbers. Its comparators run in parallel in separate partitions of the
array.

The RTL here is the configuration presented as the main one in *"ADS-IMC:
Accelerating Data Sorting with In-Memory Computation"* (Dhakad and
Vishvakarma). It sorts **eight 4-bit numbers** in a **16-column array**: four
partitions of four columns each. Each partition has 22 compute rows, and the
array adds two temporary rows. One array operation takes one clock; the
authors' 65 nm circuit does one operation in 0.55 ns, i.e. 1.81 GHz. A complete
sort takes **198 clocks**. The paper quotes 192; the difference is explained
under *Timing*.

The bitline sensing is modelled by its logic result. Everything above it is
synthesizable SystemVerilog: the array, the write-back multiplexers, the CAS
micro-program and the bitonic sequencer.

## 1. The array and its one instruction

```
             partition A      partition B      partition C      partition D
 column:     0  1  2  3       0  1  2  3       0  1  2  3       0  1  2  3
 row  0      0  0  0  0  ...  constant 0 (NOT x = NOR(x, row 0))
 row  1      1  1  1  1  ...  constant 1 (COPY x = AND(x, row 1))
 row  2      A0 A1 A2 A3 ...  operand A, later min(A,B)
 row  3      B0 B1 B2 B3 ...  operand B, later max(A,B)
 rows 4-21   scratch rows of the CAS program
 rows 22,23  temporary rows for moving words between partitions
```

Bit *c* of a number sits in column *c*, and column 3 is the most significant
bit. Row numbers in the RTL are 0-based; the paper counts rows from 1, so its
"row 3" is `ROW_A = 2` here.

Every clock, `imc_array` executes one `imc_instr_t` (defined in `ads_pkg`):

| field | meaning |
|---|---|
| `wl_a`, `wl_b` | the two rows whose word lines are raised |
| `op` | `OP_AND` (BL sense amplifier) or `OP_NOR` (BLB sense amplifier) |
| `wl_dst` | the row that is written |
| `wb` | the write-back move, chosen by a 4:1 multiplexer per partition (`imc_wb_mux`) |
| `part_en` | the partitions that are written; the others keep their cells |
| `xfer`, `xfer_src` | move a word between partitions (see section 4) |

The four write-back moves are the only ways a bit changes column:

| `wb` | move | used for |
|---|---|---|
| `WB_SAME` | each column's result into its own column | ordinary gates |
| `WB_RIGHT` | each result one column to the right (column 0 is not written) | bringing a lower bit's term next to the higher bit |
| `WB_LAST_ALL` | column 3's result into all four columns | spreading a term computed at the MSB |
| `WB_THIRD_ALL` | column 2's result into all four columns | spreading the final comparison flag |

All partitions share the word lines, so they all read the same two rows. What
makes the partitions independent is their write enables.

## 2. Compare-and-swap as a 28-step program

Raising more than two word lines risks flipping the stored cells, so the array
evaluates only two-input gates.
The comparator is therefore a network of 31 two-input gates (the paper's
Fig. 4), each row holding the outputs of one gate layer. Write `lt_i = !A_i & B_i` and
`eq_i = (A_i == B_i)`. The comparator then evaluates

```
A < B  =  lt3 | eq3&lt2 | eq3&eq2&lt1 | eq3&eq2&eq1&lt0
```

with this schedule (cycle = clock of the CAS, rows 1-based as in the paper,
**col** = column where the meaningful bit is):

| cycle | row | operation | value |
|---|---|---|---|
| 1 | 5 | NOR(A, B) | gates 1-4 |
| 2 | 6 | NOR(row 5, A) | gates 5-8: `lt_i` |
| 3 | 7 | NOR(B, row 5) | gates 9-11: `A_i > B_i` |
| 4 | 8 | NOR(row 7, row 6) | gates 12-14: `eq_i` (cols 1-3) |
| 5 | 9 | NOT row 6 | gates 15-17: `!lt_i` |
| 6 | 10 | NOT row 8 | gates 18-20: `!eq_i` |
| 7 | 11 | COPY row 9, shift right | `!lt_{i-1}` next to bit *i* |
| 8 | 12 | NOR(row 11, row 10) | gates 21-23: `lt_{i-1} & eq_i` |
| 9 | 13 | COPY row 10, shift right | `!eq2` into col 3 |
| 10 | 14 | NOR(row 13, row 10), col 3 to all | gate 24: `eq2 & eq3` |
| 11 | 15 | NOT row 10, col 3 to all | gate 25: `eq3` |
| 12 | 16 | AND(row 12, row 14) | gate 26 (col 1): `lt0&eq1&eq2&eq3` |
| 13 | 17 | AND(row 12, row 15) | gate 27 (col 2): `lt1&eq2&eq3` |
| 14 | 18 | NOR(row 12, row 6), col 3 to all | gate 28: `!(lt2&eq3 | lt3)` |
| 15 | 19 | COPY row 16, shift right | gate 26 into col 2 |
| 16 | 20 | NOR(row 19, row 17) | gate 29 (col 2) |
| 17 | 21 | AND(row 20, row 18), col 2 to all | gate 30: **A >= B** in every column |
| 18 | 22 | NOT row 21 | gate 31: **A < B** in every column |

Because both flags now sit in every column, the multiplexer (the paper's Fig. 5)
is plain bitwise logic. It reuses scratch rows 5-12 and leaves rows 1-4, 21 and
22 alone:

| cycle | row | operation | value |
|---|---|---|---|
| 19 | 5 | NOT A | A' |
| 20 | 6 | NOT B | B' |
| 21 | 7 | NOR(A', A<B) | P = A & (A>=B) |
| 22 | 8 | NOR(B', A>=B) | Q = B & (A<B) |
| 23 | 9 | NOR(P, Q) | T |
| 24 | 10 | NOR(A', A>=B) | R = A & (A<B) |
| 25 | 11 | NOR(B', A<B) | S = B & (A>=B) |
| 26 | 12 | NOR(R, S) | U |
| 27 | **4** | NOT T | **max** overwrites B |
| 28 | **3** | NOT U | **min** overwrites A |

That is 14 NOR, 8 NOT, 3 AND and 3 COPY operations: 28 clocks, the count the
paper gives. The program is the `cas_program` function in
`rtl/cas_sequencer.sv`, one line per cycle.

**A labelling issue in the source.** The paper's gate-level figure prints
"A<B" at the output of gate 30 and "A≥B" after the inverter 31. Following its
drawn gates, however, gate 5 computes `!A0 & B0`, and gate 30 comes out as the
*complement* of A<B. Only that reading reproduces the paper's own simulation
example: A=1000, B=0001 must end with 0001 in row 3 and 1000 in row 4. The RTL
therefore treats row 21 as A≥B and row 22 as A<B. The testbench checks this on
all 256 input pairs.

## 3. Eight inputs: the bitonic network on four partitions

An 8-input bitonic network has `log2N·(log2N+1)/2 = 6` steps of `N/2 = 4`
comparators, 24 CAS in all. In every step each partition runs the CAS program
above on its own pair, and all four run it at the same time (`part_en = 1111`).
The pairing below is the paper's Fig. 8. The network lines are numbered 0-7
from the top, and the letter is the partition that performs the comparator:

| step | A | B | C | D |
|---|---|---|---|---|
| 1 | 0-1 | 2-3 | 4-5 | 6-7 |
| 2 | 0-3 | 1-2 | 4-7 | 5-6 |
| 3 | 2-3 | 0-1 | 4-5 | 6-7 |
| 4 | 3-4 | 0-7 | 2-5 | 1-6 |
| 5 | 1-3 | 0-2 | 5-7 | 4-6 |
| 6 | 0-1 | 2-3 | 4-5 | 6-7 |

Every comparator puts the minimum on the lower-numbered line, i.e. the line
with the smaller number. The figure does not print directions. This is the
only choice that turns its printed inputs 6,7,3,2,5,0,1,4 into its printed
outputs 0…7. A CAS always leaves its minimum in row 3 (0-based `ROW_A`), so after
each step the lower line of a pair is in `ROW_A` and the upper line in `ROW_B`.

## 4. Moving words between partitions

Between two steps each partition keeps one of its numbers and trades the other
with a different partition. Each boundary therefore needs two exchanges (four
words moved). An exchange is three COPY operations (AND with the constant-1
row) through a temporary row; exchange *j* uses temporary row *j*:

```
copy X (partition pa)  -> temp  (written in partition pb)   cross-partition
copy Y (partition pb)  -> X     (written in partition pa)   cross-partition
copy temp              -> Y     (partition pb)              same partition
```

A cross-partition copy (`xfer = 1`) writes the enabled partitions with the
same-column result of partition `xfer_src`. With two exchanges per boundary,
this gives the paper's `3N/4 = 6` extra clocks and `N/4 = 2` temporary rows.
The exchange table, derived from the pairing above
(`swap_table` in `rtl/sort_controller.sv`), is:

| before step | exchange 1 | exchange 2 |
|---|---|---|
| 2 | A.row4 ↔ B.row4 | C.row4 ↔ D.row4 |
| 3 | A.row3 ↔ B.row4 | C.row4 ↔ D.row3 |
| 4 | B.row4 ↔ D.row4 | A.row3 ↔ C.row3 |
| 5 | B.row4 ↔ C.row3 | A.row4 ↔ D.row3 |
| 6 | A.row4 ↔ B.row3 | C.row4 ↔ D.row3 |

Input *i* (network line *i*) is loaded into partition *i*/2, row 3 for even
*i* and row 4 for odd *i*. After step 6 the sorted output is read in the same
order: partition A rows 3 and 4 hold the two smallest, and so on.

## 5. Timing

| piece | clocks |
|---|---|
| one CAS (all partitions in parallel) | 28 (18 compare + 10 multiplex) |
| one step boundary | 6 |
| full 8-input sort | 6 × 28 + 5 × 6 = **198** |

`busy` is high and an operation is issued on every one of those clocks, with
no idle clock between phases. `done` pulses with the last write.

The paper states 192 clocks (105.6 ns). It reaches that by counting 24 extra
copy clocks, i.e. four step boundaries at 6 clocks each. With the partition
lettering of its own network figure, the pairing changes at all five
boundaries, so this RTL spends 30. At 0.55 ns per operation, 198 clocks is
108.9 ns. The NOR, NOT and AND totals per sort (84, 48, 18) match the paper's
operation table. COPY is 48 here against the paper's 42.

## 6. Using the unit

`ads_imc_top` ports:

| port | dir | width | |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock (one array operation per clock), asynchronous active-low reset |
| `host_we`, `host_wrow`, `host_wpart`, `host_wdata` | in | 1, 5, 2, 4 | write one 4-bit word (only while `busy` is low) |
| `host_rrow`, `host_rpart` / `host_rdata` | in / out | 5, 2 / 4 | read one word, combinational |
| `start` | in | 1 | begins a sort when idle |
| `busy`, `done`, `step` | out | 1, 1, 3 | running; one-clock pulse at the end; current bitonic step 0-5 |

Reset clears the array and fills row 1 (0-based) with ones. The procedure is:
load the eight numbers, pulse `start`, wait for `done` (198 clocks) and read
them back. Sorts can follow one another without a reset. The host port is
this design's addition: the paper assumes the numbers are already in the
array.

Modules, bottom-up:

| file | contents |
|---|---|
| `rtl/ads_pkg.sv` | sizes, row map, `imc_instr_t`, operation and write-back enums |
| `rtl/imc_wb_mux.sv` | the 4:1 write-back multiplexer of one partition |
| `rtl/imc_array.sv` | cells, dual-word-line AND/NOR, per-partition write-back, cross-partition path, host port |
| `rtl/cas_sequencer.sv` | the 28-step CAS program |
| `rtl/sort_controller.sv` | step sequencing, exchange table, temporary rows |
| `rtl/ads_imc_top.sv` | controller + array |

The instruction format is generic. Another sorting network or bit width is a
matter of writing a new program and exchange table. The comparator program
itself, though, is specific to 4 bits, as the gate network it follows is.

## 7. Simulation

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`.
With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
    rtl/ads_pkg.sv tb/tb_ads_imc_top.sv --top-module tb_ads_imc_top
./obj_dir/Vtb_ads_imc_top
```

| testbench | what it checks |
|---|---|
| `tb_imc_wb_mux` | all four moves on all 16 inputs |
| `tb_imc_array` | 600 random instructions (all moves, partition masks, cross-partition copies) against a model, every cell compared after each |
| `tb_cas_sequencer` | all 256 pairs: min/max, both flag rows, comparator gates 24-29, operation mix 14/8/3/3, 28 clocks, disabled partitions untouched |
| `tb_sort_controller` | the network figure's example, equal, sorted, reversed and 200 random sets; 198 clocks; operation mix per sort |
| `tb_ads_imc_top` | end to end through the host port at full size; counts CAS swaps, non-swaps, equal pairs, each write-back move, cross-partition and single-partition writes, all six steps |
| `tb_ads_imc_workloads` | network size 8, and size 4 padded with 4'hF, 100 random sets each |

`tb/tb_imc_model.sv` is an independent behavioural model of the array, used by
the controller testbenches.

## 8. Where this RTL departs from the paper, and what it leaves out

- **Analog part.** The 6T cells, the bitline discharge and the
  Vref sense amplifiers are reduced to their logic result (AND on BL, NOR on
  BLB), computed and written back within one clock. Read-disturb limits,
  which are why only two-input gates are used, are not modelled.
- **Total clocks:** 198, not 192 (section 5).
- **Comparator flag naming:** row 21 holds A≥B and row 22 A<B, the reverse of
  the printed gate labels (section 2).
- **This design's own choices:**
  - the write path between partitions;
  - exchanging words one pair after the other, and the order of the three
    copies;
  - the placement of the two temporary rows after the 22 compute rows (the
    paper also says any two free rows could serve);
  - column 0 left unwritten by the right shift;
  - the select encoding;
  - the reset;
  - the host port and handshake.
- **Not built.**
  - The 4×9 variant of the CAS block. The paper only says that reusing cells
    brings a CAS from 4×22 to 4×9 cells, and gives no cell map. Its memory
    comparison (about 144 bits for 8 inputs, i.e. 16×9) seems to use that
    variant, while this RTL uses 16×24 = 384 cells.
  - Networks of 16 and 32 inputs. They need 8 and 16 partitions and exchange
    schedules the paper does not give.
  - Four inputs run on this unit by padding with 4'hF, but take 198 clocks
    rather than the roughly 87 of a dedicated 4-input unit.
