# OISMA: a memory array whose read is a multiplication

OISMA (On-the-fly In-memory Stochastic Multiplication Architecture) is a
resistive (1T1R RRAM) memory array in which reading a row can also multiply
that row, bit by bit, with an input vector. Numbers are stored as short
fixed bit patterns (the Bent-Pyramid format described below). In that format
a product is the bit-wise AND of two patterns, and counting the ones of the
AND gives the product. The column circuit pre-charges each bitline only where
the input bit is 1. The sense amplifier therefore reads `IN AND cell` at no
extra cost. An adder tree under the array counts the 256 output bits, so every
memory access yields a 32-term dot product.

This repository holds synthesizable SystemVerilog (IEEE 1800-2017) for one
4 KB array: 256 columns × 128 rows, built as two 128 × 128 sub-arrays that
share one row decoder. It covers the per-column control logic, the
accumulation periphery, the control sequencer, and behavioural models of the
parts that are analog in silicon (RRAM cells, bitlines, sense amplifiers).
The structure and sizes follow the OISMA paper by Agwa, Pan, Papandroulidakis
and Prodromakis. Where that description stops, the choices made here are
marked below.

## 1. Bent-Pyramid numbers

A Bent-Pyramid (BP) number is one of ten fixed patterns for the values
0.0, 0.1, …, 0.9. Two complementary sets exist:

| value | right-biased (multiplier) | left-biased (multiplicand) |
|------:|:-------------------------:|:--------------------------:|
| 0.0 | `0000000000` | `0000000000` |
| 0.1 | `0000010000` | `0000100000` |
| 0.2 | `0000011000` | `0001100000` |
| 0.3 | `0000011100` | `0011100000` |
| 0.4 | `0000111100` | `0011110000` |
| 0.5 | `0000111110` | `0111110000` |
| 0.6 | `0001111110` | `0111111000` |
| 0.7 | `0001111111` | `1111111000` |
| 0.8 | `0011111111` | `1111111100` |
| 0.9 | `0111111111` | `1111111110` |

The number of ones in `right(x) & left(y)`, divided by 10, approximates
`x·y`. For example, 0.3 · 0.6 gives `0000011000`, two ones, i.e. 0.2 for an
exact 0.18. The leftmost bit of every right-biased pattern is 0. The
rightmost bit of every left-biased pattern is also 0. So the two outer bits
never contribute to an AND. The array stores only the middle eight bits
(BP8): 0.3 right-biased becomes `00001110` and 0.6 left-biased becomes
`11111100`. The result is still read in tenths.

`oisma_pkg` holds both 10-bit tables and the functions `bp8_right()` and
`bp8_left()`, which return the 8-bit patterns. Inputs (the vector `IN`)
use right-biased patterns. Weights (the stored rows) use left-biased
patterns.

Data layout in this RTL: BP8 number *j* of a row or of the input vector
occupies columns `8j+7 … 8j`. Bit `8j+7` holds the leftmost pattern bit.
A row therefore holds 32 numbers, and an operation computes

    acc_out = Σ_{j=0..31} popcount( right8(x_j) & left8(w_j) )   (0 … 256)

which is 10 × (dot product of x and w), approximately.

## 2. What happens on a column during one operation

Every operation has two phases. The bitlines are first pre-charged or
pre-discharged. They then float while one wordline is on, and the sense
amplifier decides. Each column has two bitlines: `BL` carries the data, and
`BLb` is the return line used for programming. The control signals are WE,
S, Sb, R and Pre_en. They are common to all columns and produced by
`oisma_controller`. This table gives each drive state (C = charge,
D = discharge, F = floating, X = don't care):

| operation | phase | WE | S | Sb | R | IN | Pre_en | BL | BLb |
|---|---|---|---|---|---|---|---|---|---|
| read | 1 | 0 | 0 | 1 | 1 | X | 1 | C | D |
| read | 2 | 0 | 0 | 1 | 0 | X | 0 | F | F |
| AND, IN = 0 | 1 | 0 | 1 | 0 | 0 | 0 | 1 | D | D |
| AND, IN = 1 | 1 | 0 | 1 | 0 | 0 | 1 | 1 | C | D |
| AND | 2 | 0 | 0 | 1 | 0 | X | 0 | F | F |
| write 0 | both | 1 | 1 | 0 | X | 0 | X | D | C |
| write 1 | both | 1 | 1 | 0 | X | 1 | X | C | D |

* `precharge_oisma_logic` produces the BL column of the table. The input bit
  is used when S is high and the read enable R when Sb is high. The selected
  bit decides between pre-charge and pre-discharge. With neither selected, BL
  floats. The equations are `node = S&IN | Sb&R` and
  `BL = node ? C : (S ? D : F)`.
* `write_logic` produces the BLb column. Two multiplexers, switched by WE,
  choose what drives the BLb pull-up and pull-down. For reads and ANDs the
  pull-up is off and the pull-down follows Pre_en. For writes both follow IN,
  so BLb is driven opposite to BL.
* `rram_subarray` models the cells and bitlines. A cell in the high
  resistance state (HRS) stores 1 and one in the low resistance state (LRS)
  stores 0. A pre-charged, floating BL stays above the sense reference over
  an HRS cell and falls below it over an LRS cell. A pre-discharged BL stays
  low whatever the cell holds. That is why phase 2 of an AND yields
  `IN & cell`. When the wordline is on and BL/BLb are driven in opposite
  directions, the cell is programmed to BL's value.
* `sense_amp` latches each bitline's comparison with the reference at the
  end of phase 2.

## 3. Accumulation periphery

The 256 sense-amplifier outputs are counted in three levels:

```
16 bits --parallel_counter (full/half adders)--> 5 bits      x16
4 x 5 bits --two 5-bit + one 6-bit ripple adder--> 7 bits    (sc_to_binary_64) x4
4 x 7 bits --two 7-bit + one 8-bit ripple adder--> 9 bits    (accumulation_periphery)
```

All three levels are combinational. The 5-, 6-, 7- and 8-bit adders are
`ripple_carry_adder` instances built from `full_adder` cells.
`parallel_counter` is the published 16-input counter: 11 full adders and 7
half adders in five rows. The first row compresses bits 0–14 in groups of
three. Pairs of first-row sums and carries are combined by half adders and
full adders, and the last row produces count bits 0 to 4. Its wiring is
listed in the module's header. It has been checked over all 65536 inputs.

## 4. The top level, `oisma_top`

Ports (all plain signals; `op_e` comes from `oisma_pkg`):

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | phase clock; asynchronous active-low reset |
| `op_valid`, `op`, `addr` | in | 1, 2, 7 | request: `OP_READ`, `OP_MAC`, `OP_WRITE` on row `addr` |
| `in_load` | in | 1 | with `OP_MAC`: load `data_in` as the new input vector first |
| `data_in` | in | 256 | row to write, or input vector |
| `ready` | out | 1 | a request is taken on a rising edge where `op_valid && ready` |
| `out_valid` | out | 1 | one-cycle pulse: result of a read or MAC |
| `sc_result` | out | 256 | sense-amplifier outputs: the row (read) or `IN & row` (MAC) |
| `acc_out` | out | 9 | number of ones of `sc_result` |

Timing, in clock cycles of the phase clock:

```
edge   0        1         2
       accept   phase 1   phase 2 ends: SA latch
state  -> PRE   -> EVAL   -> (next PRE or IDLE)
out_valid                  high after edge 2, for one cycle
ready  1        0         1   (a new request may be taken at edge 2)
```

An operation takes two cycles, and back-to-back requests run at one
operation every two cycles. The source design performs one operation per
20 ns at 50 MHz, with a ~14 ns pre-charge phase. Running this RTL's phase
clock at 100 MHz gives the same operation rate. In that case each
256-column MAC is 32 multiply-accumulates, 3.2 GOPS.

**Input-stationary use.** `data_in` is copied into an input register only on
a MAC with `in_load = 1`. Later MACs with `in_load = 0` reuse that vector,
so one input can be multiplied with all 128 rows without being sent again.
The input register is this design's way of supplying `IN`. In the source
design, `IN` comes from a second memory array that holds the inputs.

**Matrix multiplication.** For `C = A·B` with an inner dimension up to 32:

1. Write column *j* of `B` as row *j*, using left-biased patterns and zeros
   in unused slots.
2. For each row *i* of `A`, send it once (right-biased, `in_load = 1`).
3. Issue MACs on rows 0 … N−1. `acc_out / 10` is `C[i][j]`.

`tb/tb_matmul.sv` does exactly this for N = 4, 8, 16 and 32. Against the
exact double-precision product of random values in [0, 0.95), it measures
a mean relative Frobenius error of 8.4 %, 7.6 %, 5.7 % and 4.8 % (five random trials
each). Those
figures are of the same order as those published for this number format,
and fall with N as the rounding errors cancel.

**What does not fit.** Dot products longer than 32 numbers (inner dimension
≥ 64) need several rows per output. The partial sums must then be added
outside the array. Matrices with more than 4096 weights need several
arrays. Neither the cross-row accumulation nor a multi-array engine is part
of this design.

## 5. Files

| file | content |
|---|---|
| `rtl/oisma_pkg.sv` | sizes, `op_e`, `bl_drive_e`, `ctrl_t`, BP tables and encoders |
| `rtl/oisma_top.sv` | one 4 KB array, end to end |
| `rtl/oisma_controller.sv` | two-phase sequencer, control words, handshake |
| `rtl/address_decoder.sv` | row decoder + wordline drivers, shared by both sub-arrays |
| `rtl/precharge_oisma_logic.sv` | BL driver, one per column |
| `rtl/write_logic.sv` | BLb driver, one per column |
| `rtl/rram_subarray.sv` | behavioural model: 128×128 RRAM cells and bitlines |
| `rtl/sense_amp.sv` | behavioural model: latching sense amplifiers |
| `rtl/accumulation_periphery.sv` | 256 → 9-bit counter |
| `rtl/sc_to_binary_64.sv` | 64 → 7-bit counter |
| `rtl/parallel_counter.sv` | 16 → 5-bit counter |
| `rtl/ripple_carry_adder.sv`, `rtl/full_adder.sv`, `rtl/half_adder.sv` | adder cells |
| `tb/tb_<module>.sv` | self-checking test of each module |
| `tb/tb_oisma_top.sv` | full-size end-to-end test (writes, reads, held-input and new-input MACs, rate, latency) |
| `tb/tb_matmul.sv` | N×N matrix multiplications, N = 4 … 32 |

## 6. Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and ends itself; a
watchdog ends a hung run with a failure. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/oisma_pkg.sv tb/tb_oisma_top.sv --top-module tb_oisma_top -o sim
./obj_dir/sim
```

Replace `tb_oisma_top` with any other testbench name. The full-size tests
take well under a second. The package must come first on the command line;
other modules are found through `-Irtl`.

Before a row is written, the bitcells hold arbitrary values, as a fresh
non-volatile array would. Tests write every row before they read it.

## 7. How far to trust it, and where it departs from the source

Taken directly from the source description:

* the array size and the sub-array split;
* the BP tables and the BP8 compression;
* the control signals and the full drive-state table;
* the HRS = 1 / LRS = 0 convention;
* the read / AND / write behaviour;
* the structure and widths of the accumulation periphery (four 64→7
  converters and 7/7/8-bit adders; four 16→5 counters and 5/5/6-bit
  adders);
* ripple-carry adders.

This design's own choices:

* One clock cycle per phase, where the source uses two unequal phases within
  one 20 ns period. The two-cycle write also has no stated timing in the
  source.
* The request/ready handshake, the input and write-data registers, the
  asynchronous reset, and the unregistered `acc_out`.
* Which columns feed which counter, and the bit order of a BP8 number within
  its eight columns.
* The sense amplifier holding its output until the next sensing. In the
  original circuit simulation the output falls during the next operation.
* Which way an RRAM cell is oriented for programming. The model stores 1
  when BL is charged and BLb discharged.

Not modelled: any voltage, resistance or delay. This includes the
pre-charge levels, the 0.3–1.2 V bitline swing, the reference voltage and
its sensing margin, the 112 kΩ / 8.04 MΩ device states, the write voltages
and energy. `rram_subarray` and `sense_amp` stand in for custom analog
circuits. They capture the logic those circuits perform, not their
electrical behaviour. Also absent: the on-chip test circuits and pad ring
seen in the chip layout (whose function is not described), the second memory
array that supplies inputs, and the scaled-up multi-array engine named as
future work.

Lint notes: `precharge_oisma_logic` and `write_logic` take the whole shared
control word and each use only part of it. Verilator's note that `rst_n` is
used both synchronously and asynchronously comes from the `disable iff`
clauses of the assertions.
