# GEM3D: matrix operations inside a stacked SRAM-on-eDRAM memory

Most compute-in-memory arrays do one thing: they turn many rows on at once,
sum currents down each column, and read out a dot product. GEM3D is a memory
macro that does more. It can also do three other operations:

- transpose a matrix in place;
- multiply two matrices element by element (Hadamard product);
- add two matrices element by element.

It still supports the ordinary column dot product.

The macro is two device layers stacked on top of each other:

- **Layer A** is SRAM;
- **Layer B** is eDRAM.

The layers are joined by one vertical via ("bond") per transpose cell and
one per arithmetic word. Each layer is split into sub-arrays, and each
sub-array is built for one job.

This repository holds a cycle-level SystemVerilog model of that macro:

- synthesizable RTL for the memories, the counters and all control;
- small ideal behavioural models for the analog parts, namely the current
  DACs, the current-to-voltage networks, the capacitor multiplier, the ramp
  and the comparators.

Every part has its own self-checking testbench. An end-to-end testbench runs
the whole macro at its full 32 × 32 size.

## Organisation

```
                     Layer A (SRAM)                          Layer B (eDRAM)
  transpose   tsram_subarray  N x N x 4b  <== bonds ==>  tedram_subarray  N x N x 4b
              (transpose_ctrl drives the word lines and blockers of both)

  multiply    ma_sram_subarray MA_N x 2*MA_M x 4b        ma_edram_subarray MA_N x MA_M x 8b
              per word: ma_dac -> ma_iv_converter ==>      c2c_multiplier -> diff_comparator
                                                           (ramp_generator, ma_edram_word LFSR)
  add         same pair, two DACs per result word,      same, no multiplier
              currents summed before conversion

  control_unit -> transpose_ctrl / ma_ctrl (one per pair) ; lfsr_calib_logic per pair
  host word port -> every sub-array ; reads of LFSR words pass through lfsr_decode
```

The top, `gem3d_top`, has one sub-array of each kind. The paper's floor plan
shows several banks per layer but does not give their number.

Parameters and defaults:

| parameter | default | meaning |
|---|---|---|
| `N` | 32 | transpose matrix size |
| `MA_N`, `MA_M` | 32, 32 | element-wise matrix size |
| `LFSR_TAP` | 6 | second feedback tap of the LFSR words; see below |
| `COMP_VOS_LSB` | 0.0 | injects comparator offsets to exercise calibration |

All data words are 4 bits. The LFSR words are 8 bits, and they decode to
6-bit results.

## Transpose in N+1 cycles

The matrix sits in the T-SRAM of Layer A, one 4-bit word per cell. A
conventional transpose reads and writes every element and needs about 2N
cycles. Here it takes N+1 cycles, and no word ever leaves the two
sub-arrays.

### The cell

Each transpose cell has two extra ports:

- a read port **R**, which drives the cell's value when its read word line
  RWL is high;
- a write port **W**, which stores a value when its write word line WWL is
  high.

The word lines run in opposite directions in the two layers:

- in Layer A, RWL runs along columns and WWL along rows;
- in Layer B, RWL runs along rows and WWL along columns.

The R and W lines of a row are joined to the row below through "blocker"
switches, so that a value read in one row can be written in another.

### The three steps

`transpose_ctrl` produces the three steps. In the table, entry (i, j) is row
i, column j.

| cycle | Layer A (T-SRAM) | Layer B (T-eDRAM) | blockers |
|---|---|---|---|
| 1 | all RWL: upper-triangle cells drive their bonds | all WWL: upper-triangle cells take them | both off |
| 2 … N | RWL_k + WWL_k: `A[k][i] <= A[i][k]` for all i > k | RWL_k + WWL_k: `B[i][k] <= B[k][i]` for all i > k | 1 off, 2 on |
| N+1 | all WWL: lower-triangle cells take the bonds | all RWL: lower-triangle cells drive their bonds | both off |

After step 1, Layer B holds the old upper triangle. Step 2 runs one column
pair per cycle:

- Layer A moves its lower triangle into its upper triangle;
- at the same time, Layer B mirrors its upper triangle into its lower
  triangle.

Step 3 brings that mirrored copy back into Layer A's lower triangle. The
diagonal never moves. When the operation ends, Layer A holds the transpose.
Layer B's lower triangle also holds it.

### How it is modelled

- Bonds are plain arrays of 4-bit nets, `bond_ab` and `bond_ba`.
- Only upper-triangle cells drive or take the A→B bonds, and only
  lower-triangle cells use the B→A bonds.
- The in-layer copy of step 2 is written as its net effect per cycle. The
  R/W wiring and blockers themselves are not drawn.
- Each sub-array also has a normal word port (`acc_*`). It is usable only
  while no transpose step is active, and an assertion checks that.

`transpose_ctrl` keeps `busy` high for exactly N+1 cycles. Every transpose
testbench checks that count.

## Element-wise multiply and add with an LFSR ADC

### The analog path

Operands are stored in pairs in an MA-SRAM sub-array: column 2j holds
a_ij and column 2j+1 holds b_ij. Each word has a 4-bit current DAC with
binary-weighted transistors (`ma_dac`, I = q · 1 µA). A resistor-like network
(`ma_iv_converter`) turns that current into a voltage, which goes down
through the bond.

- **Add.** The DAC currents of a_ij and b_ij are summed before the
  conversion: V = 0.024 V/µA · (a + b). Full scale is 0.72 V, reached at
  a + b = 30.
- **Multiply.** Only a_ij's DAC is used: V_DAC = 0.048 V/µA · a. In Layer B,
  b_ij sits in the low four bits of the result word itself. A C-2C ladder
  (`c2c_multiplier`) forms V_DAC · b / 16 and holds it once the DAC is
  switched off. Full scale is 15·15/16 LSB = 0.675 V.

The paper gives neither voltage scale. These values are chosen so that both
operations use the same 64-step ramp shape.

### The conversion

Each Layer B word has its own comparator (`diff_comparator`). It compares
the word's voltage with a ramp that all words share (`ramp_generator`). The
ramp has 64 steps, and step k sits at (k + ½)/64 of full scale.

While the word's voltage is above the ramp, the comparator's `delay` output
is high. On every reference clock edge during that time, the 8-bit eDRAM
word takes one step as a linear feedback shift register (`ma_edram_word`).
After 64 cycles the LFSR's position in its sequence is the result:
round(64 · V / V_FS), saturating at 63.

No binary counter or adder is needed, because the memory word itself is the
counter. The host reads the raw 8-bit state. `lfsr_decode` maps it back to a
6-bit value with a table that is computed at elaboration.

### Sequencing

`ma_ctrl` sequences one operation:

1. One cycle with the DACs on and the multiplier sampling.
2. The start-bit write: every word set to `00000001` in one cycle, or, after
   calibration, its own start state written one row per cycle.
3. 64 conversion cycles.
4. For a calibration run only, one capture cycle per row.

The add sub-array keeps its DACs on through the conversion, because the
paper describes no sample-and-hold for the sum.

### The LFSR polynomial

This is the main departure from the paper. The paper puts the feedback into
Q8 as Q7 XOR Q1. With that tap, the state `00000001` sits on a cycle of only
30 states, which is fewer than the 64 levels the converter needs.

This design keeps the shift direction and the Q1 tap. The second tap is made
a parameter with default Q6, which gives a 217-state cycle. The shift is
`{Q1 ^ Q[tap], Q8..Q2}`.

### Decoding

Positions are decoded as follows:

- positions 0…63 read as themselves;
- positions just below 0 in the cycle (P−64 … P−1) read as 0. These only
  occur after calibration, when a start state lies before `00000001`;
- anything else reads as 63.

## Comparator-offset calibration

Each word's comparator is small, and each has its own input offset.
Calibration removes the offsets as follows:

1. `OP_CAL_MUL` or `OP_CAL_ADD` switches every comparator of that sub-array
   to a known mid-scale input, V_FS · 32/64.
2. The conversion runs from `00000001`.
3. A word whose comparator has no offset ends at position 32. A word that
   ends at position p is p − 32 steps off.
4. `lfsr_calib_logic` stores, for each word, the LFSR state at position
   (32 − p) mod P, the state that many steps before `00000001`.
5. Every later conversion in that sub-array starts each word from its stored
   state.

The counter thus subtracts the offset itself, and read-out needs no
correction. An offset of s steps is removed exactly as long as s is a whole
number of steps, since the decoder clamps negative positions to 0.

The paper fixes three things: a known input, recording the LFSR output, and
using it as each word's starting point. The arithmetic and the mid-scale
value are this design's own.

## Dot product (MAC)

`OP_MAC` reuses the multiply sub-array pair for a conventional dot product:

1. The host input `mac_in[i]` is a binary activation for row i. It is
   sampled when the command is taken, and it gates the DAC enable of the
   A words in that row.
2. The currents of all rows in a column are summed (`mac_column_sum`).
3. The column voltage replaces the product at the comparator of row 0 of
   the multiply eDRAM. That is the comparator already calibrated by
   `OP_CAL_MUL`.

Word (0, j) then ends with round(64 · Σ_i mac_in[i]·a_ij / (15 · MA_N)),
clamped to 63.

The other rows of that eDRAM sub-array hold no meaningful value after a dot
product. The paper only says that the column result "can be sent to Layer B"
or to a separate ADC. The choice of row 0, the binary activations and the
full-scale choice are this design's own. The separate ADC option is not
built.

## Using the top

### Commands

`gem3d_top` takes one command at a time. `cmd_op` is a `gem3d_pkg::op_e`:
NOP, TRANSPOSE, MUL, ADD, CAL_MUL, CAL_ADD or MAC.

- A command is taken when `cmd_valid && cmd_ready`.
- `cmd_ready` stays low until the operation ends.
- `cmd_done` pulses for one cycle when it ends.

Operation lengths:

| operation | cycles |
|---|---|
| transpose | N + 1 |
| multiply, add or dot product, uncalibrated | 1 + 1 + 64 |
| multiply, add or dot product, calibrated | 1 + MA_N + 64 |
| calibration run | 1 + 1 + 64 + MA_N |

The control unit and the sub-array controllers each add a cycle or two of
handshake around these.

### Host word port

The host word port reaches every sub-array. Use it only while `cmd_ready` is
high; an assertion checks this.

`host_sel` (`sel_e`) picks the sub-array, and `host_row`/`host_col` pick the
word. A write takes effect at the clock edge.

A read returns `host_rdata` one cycle later, with `host_rvalid`. On LFSR
words, `host_rvalue` gives the decoded 6-bit result.

For a multiply, write:

- a_ij to MUL_SRAM column 2j;
- b_ij to MUL_SRAM column 2j+1;
- b_ij again to MUL_EDRAM word (i, j).

The last write is needed because the multiplier reads b from the eDRAM word.
Results are read from the same eDRAM sub-array.

## What is behavioural, and what is left out

### Behavioural models

The following are ideal, linear models written with `real` ports:

- `ma_dac`, `ma_iv_converter`, `c2c_multiplier`, `ramp_generator`,
  `diff_comparator` and `mac_column_sum`;
- the multiplier's track/hold, written as a latch.

They do not synthesize, and yosys' synthesis step refuses the `real`
constants in the top. Everything else is plain RTL. Nonlinearity, noise,
process variation and the analog timing (the 1 ns DAC boost, 3 ns or 6 ns
conversion cycles) are not modelled. Each reference-clock cycle is one
clock edge.

### Departures from the paper

- The LFSR feedback tap (see above).
- One sub-array per function instead of several banks.
- A plain host word port instead of the chip's input and output buffers.
- The step-2 copy is written as its net effect rather than through the
  R/W line and blocker switches.

### Not built

- Bias generators and the 1.8 V DAC supply boost.
- Row decoders, word-line drivers and sense amplifiers, beyond the logical
  word addressing.
- The inter-layer vias themselves; they are plain nets.
- The dedicated high-precision ADC option for dot products.

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and ends with
`$finish`. Each has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/gem3d_pkg.sv tb/tb_gem3d_top.sv --top tb_gem3d_top -Mdir obj_top
./obj_top/Vtb_gem3d_top
```

Replace the testbench name to run any other. The package file must come
first.

- `tb_gem3d_top` runs the end-to-end sequence at reduced size (6 × 6
  transpose, 3 × 4 multiply/add) with comparator offsets switched on. The
  sequence is:
  - two transposes;
  - multiply and add, uncalibrated;
  - a dot product;
  - both calibrations;
  - multiply, add and dot product again, calibrated;
  - one more multiply.

  It compares every result with integer arithmetic done in the testbench.
  It also counts how often each mechanism happened: in-array copy cycles,
  saturation, offsets seen and corrected, calibrated start-bit rows, rows
  switched off in a dot product. It fails if any mechanism never happened.
- `tb_gem3d_full` runs the same sequence with every parameter at its
  default: 32 × 32 everywhere, ideal comparators. The build takes a few
  minutes and the run about a second.
- The other `tb_<module>` files test one module each. They check it against
  its defining formula or state sequence, and check cycle counts where the
  design has one (N+1 transpose cycles, 64 conversion cycles).

Verilator simulates two-state logic. Everything that is read is reset or
written before use.
