# 8T SRAM in-memory MAC and MAC-derived logic: an 8x8 macro in SystemVerilog

An 8x8 block of 8T SRAM cells works as an ordinary memory and also as eight
multiply-accumulate (MAC) units running in parallel. Each column stores an
8-bit operand B, one bit per row. The other operand A goes onto the eight
read word lines (RWLs), one bit per row, and all of them are raised together.
Each cell that holds a 1 on a raised row discharges its column's read
bit-line (RBL). The more such cells there are, the lower the RBL falls. A
column therefore computes

    count[c] = sum over r of A[r] AND B[c][r]      (0..8)

as a voltage. A bank of eight comparators per column turns that voltage into
a digital code. When only two rows are raised, the same code also gives the
Boolean functions of the two stored bits: count 0 is NOR, count 1 is XOR,
count 2 is AND. NAND, OR and XNOR are their complements, and a 1-bit add is
sum = XOR, carry = AND. The logic comes from the same MAC evaluation, with no
separate logic unit.

The 8T cell makes this safe. Its read path is two stacked transistors that
sit apart from the storage node: one gated by the stored value Q, one by RWL.
Raising many read word lines at once therefore cannot flip a stored bit. A
6T cell shares its read and write paths and would have that problem.

The reference implementation is a 90 nm, 1.8 V custom circuit clocked at
142.85 MHz (7 ns). This RTL reproduces its function, organisation and cycle
timing. The analog parts (the bit cell, the read bit-line with its precharge,
and the comparators) are behavioural models. They carry voltages as integers
in millivolts, so everything stays synthesizable and runs in a two-state
simulator.

## Organisation

```
                 d, wen, col_addr
                        |
               +-----------------+  column_decoder (3:8)
               |  write_driver   |  BL/BLbar per column
               +-----------------+
 row_addr  +-----+  +----------------------------------+
 wen,rd_en |     |  | rbl_column x8 (precharge + RBL)  |<- blpc
 mac_en -->| row |  +----------------------------------+
 rwl_pattern dec |  |                                  |
           | (3:8)->| imc_cell_array: 8 x 8 sram8t_cell|
           |     |WL|  WL, RWL shared along a row      |
           |     |RWL  BL, BLbar, RBL shared down a col|
           +-----+  +----------------------------------+
                    | mac_decoder x8 (8 comparators)   |
                    | logic_interpret x8               |
                    +----------------------------------+
                     v_rbl, mac_therm, mac_count, and/nand/or/nor/xor/xnor,
                     row_q, rdata
```

| module | what it is |
|---|---|
| `imc_pkg` | array size, the RBL voltage for each count, the comparator references |
| `sram8t_cell` | behavioural 8T cell: clocked write from BL/BLbar under WL; `rbl_pd = RWL & Q` |
| `imc_cell_array` | 8x8 cells; reports `pd[c][r]`, the cells that conduct onto each RBL |
| `row_decoder` | 3:8 decode: one-hot WL when writing, one-hot RWL when reading, the operand pattern on all RWLs for a MAC |
| `column_decoder` | 3:8 one-hot column select |
| `onehot_decoder` | the shared 3:8 decoder |
| `write_driver` | BL=d, BLbar=~d on the selected column while writing; both lines high everywhere else |
| `rbl_column` | behavioural precharge circuit and RBL of one column |
| `voltage_comparator` | behavioural comparator, `out = vin > vref` |
| `mac_decoder` | eight comparators on one RBL, producing a thermometer code |
| `logic_interpret` | reads the count and the logic functions off the code |
| `imc_top` | the whole macro |

## The read bit-line and its levels

The RBL behaves like an analog accumulator, and this is the least obvious
part of the design. Each column works in three steps:

1. **Precharge** (`blpc` = 1 for one cycle). The RBL is pulled to 1800 mV.
2. **Evaluate** (`mac_en` or `rd_en` = 1 for one cycle). In the real circuit
   the RWLs are pulsed for 0.7 ns. Each conducting cell sinks current for
   that time, and the line settles at a level set by the number of
   conducting cells. A longer pulse would drain the line whatever the count,
   so the pulse width matters. The model treats the window as finished
   inside the 7 ns cycle. During the evaluation cycle `v_rbl` is the settled
   level, and that level is stored at the clock edge that ends the cycle.
3. **Hold**. The line stays at that level until the next precharge.

The settled levels are the simulated values of the reference circuit, which
had a 200 fF RBL load:

| conducting cells | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 |
|---|---|---|---|---|---|---|---|---|---|
| RBL (mV) | 1758 | 1528 | 1308 | 1096 | 895 | 712 | 552 | 418 | 310 |

Adjacent levels lie 108 to 230 mV apart. The steps shrink as the count
rises, because the line discharges less for each extra cell once it is
already low.

`rbl_column` checks two sequencing rules with immediate assertions.
Precharge and evaluation must never happen in the same cycle. An evaluation
must come after a precharge. If you break the second rule, the model keeps
the lower of the stored and the new level. This is a guess at a line that
keeps draining, not data from the reference circuit.

## Decoding: the thermometer code

Each column has eight comparators. Comparator k compares the RBL with the
reference VRef k, and its output `mac[k]` is 1 while the RBL is above that
reference. The references are not published. Here each one sits half-way
between the two levels it has to separate:

| comparator k | 7 | 6 | 5 | 4 | 3 | 2 | 1 | 0 |
|---|---|---|---|---|---|---|---|---|
| separates counts | 0/1 | 1/2 | 2/3 | 3/4 | 4/5 | 5/6 | 6/7 | 7/8 |
| VRef (mV) | 1643 | 1418 | 1202 | 995 | 803 | 632 | 485 | 364 |

So the code for count n is `8'hFF >> n`. Count 0 gives `11111111`, count 1
gives `01111111`, and so on down to `00000000` for count 8. Written MSB
first, this is the published decoding table. That table does not say which
printed bit belongs to which of the comparators labelled MAC0 to MAC7, so
the bit order here (bit k = comparator k) is this design's choice. A freshly
precharged line (1800 mV) also reads as `11111111`.

To retune the references, override the `VREF` parameter of `imc_top` (or of
`mac_decoder`). The RBL levels and default references describe an 8-row
column; a different array size needs its own levels in `imc_pkg` as well.
The reference design suggests this for larger arrays or process corners.
`logic_interpret` gives the count as 8 minus the number of ones in the code.

## Logic from two rows

Store two operand bits x and y in two rows of a column, precharge, and raise
both rows' RWLs. Set `rwl_pattern` to just those two bits and `mac_en` = 1:

| x y | count | AND / carry | NOR | XOR / sum |
|---|---|---|---|---|
| 0 0 | 0 | 0 | 1 | 0 |
| 0 1 | 1 | 0 | 0 | 1 |
| 1 0 | 1 | 0 | 0 | 1 |
| 1 1 | 2 | 1 | 0 | 0 |

NOR is comparator 7 itself, and AND is comparator 6 inverted. XOR needs both
of them (`~mac[7] & mac[6]`). Put two 8-bit words in two rows, one bit per
column, and one evaluation gives the bitwise 8-bit AND, NAND, OR, NOR, XOR
and XNOR of the two words, plus eight independent 1-bit sums and carries.
If more than two rows are raised, the outputs follow the same thresholds:
AND means a count of at least 2 and XOR means a count of exactly 1. They are
then no longer the AND or XOR of all the operands.

## Interface and timing of `imc_top`

All inputs are sampled at the rising edge of `clk`. Use one kind of
operation per cycle.

| operation | inputs | effect |
|---|---|---|
| write | `wen`=1, `row_addr`, `col_addr`, `d` | cell (row, col) takes `d` at the edge |
| precharge | `blpc`=1 | all eight RBLs at 1800 mV; `precharged` goes to all ones |
| MAC / logic | `mac_en`=1, `rwl_pattern`=A | within this cycle: `v_rbl`, `mac_therm`, `mac_count` and the six logic vectors for all columns |
| read | `rd_en`=1, `row_addr`, `col_addr` (after a precharge) | within this cycle: `row_q` = the whole row, `rdata` = the bit at `col_addr` |

`mac_en` takes priority over `rd_en`. A read raises one RWL, so a stored 1
gives count 1 and a stored 0 gives count 0. `row_q` is therefore the OR
output. `rst_n` is synchronous and active low. It resets only the RBL state,
which goes to 0 mV and not precharged. The cells are not reset, as in any
SRAM.

One complete MAC is eight write cycles to load B, then one precharge cycle.
The result is valid in the next cycle, 9 x 7 ns = 63 ns after loading
started. That is one operation per 63 ns, about 15.9 M operations/s, which
matches the throughput of the reference design. A new A can be applied after
every precharge without reloading B.

## Where this RTL follows the reference design and where it does not

Taken from the reference design:
- the 8x8 organisation, with WL/RWL per row and BL/BLbar/RBL per column
- the cell's read path (RWL & Q)
- one precharge circuit and one 8-comparator decoder per column
- the 3:8 row and column decoders
- the 1.8 V precharge and the nine RBL levels
- the decoded codes
- the rules for AND, NOR, XOR and the 1-bit add
- the load, precharge and evaluate sequence and its 63 ns at 7 ns per cycle

Choices made here, because the reference design does not give them:
- voltages as integer millivolts
- a clocked write; a column with both bit lines high is left unchanged
- comparator references at the midpoints between levels
- which bit of the code belongs to which comparator
- ordinary reads through the read port and the MAC decoder
- the `mac_en` / `rd_en` priority
- reset behaviour and the `precharged` flag
- the binary count output
- the small amount of logic in `logic_interpret`; the reference design says
  the functions need no extra logic

Not modelled:
- transistor sizing
- comparator offset, noise and delay
- the effect of an evaluation window longer than 0.7 ns
- energy: the reference design reports 5.4 fJ at count 0 up to 452.2 fJ at
  count 8 (56.56 fJ/bit) from the RBL alone
- process and mismatch variation

The comparator models are ideal, so the model always decodes the count
correctly. It says nothing about the sensing margins of a real array.

## Simulating

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl --top-module tb_imc_top \
          rtl/imc_pkg.sv tb/tb_imc_top.sv
./obj_dir/Vtb_imc_top
```

Replace `tb_imc_top` with any other testbench name. `-Irtl` lets Verilator
find the modules by file name. `tb_imc_top` runs the macro at its default
size and 7 ns clock, and checks five things:
- the all-ones 8-bit MAC and its 9-cycle latency
- every count 0..8 on every column, against `popcount(A & B)` and the level
  and code tables
- random operands
- bitwise logic and 1-bit adds on random 8-bit word pairs
- single-row reads

It also counts how often each mechanism occurred: writes, precharges, MACs,
reads, each count value, and AND, NOR and XOR results of 1. A mechanism
that never occurs counts as a failure. It runs in well under a second.

`tb_imc_tables` replays the two reference tables row by row on the full
macro: the count-versus-voltage table, and the two-operand logic table.
In the first table, B is `1..10..0` and the don't-care bits of A are
random. The tables print patterns as strings. Here string position i,
counted from the left, is row i. That mapping is this testbench's choice.
