# RRAM compute-in-memory macro for binary matrix-vector multiplication

Code-based and LPN-based post-quantum schemes (Classic McEliece, LPN
commitments) spend much of their time on one operation: multiplying a large,
fixed binary matrix by a binary vector that changes often, over GF(2):

    y_i = XOR over j of (a_ij AND x_j),    i = 1..m

This macro keeps the matrix `A` where it is used: in non-volatile RRAM cells.
Each cell does the AND by conducting a unit current (about 4 uA) only when
its input is 1 and its RRAM is in the low-resistance state (`a_ij = 1`). All
cells of a row share a source line, so the row current counts the 1-products.
The XOR is the parity of that count. A *pulsed current-sensing parity checker*
(PCSPC) senses the parity without ever digitising the count.

The design follows the architecture of Yue et al., "An RRAM compute-in-memory
architecture for high energy-efficient processing of binary matrix-vector
multiplication in cryptography". That chip is mostly analog. Here, its
digital control and data path are synthesizable SystemVerilog. The analog
parts (RRAM cells, current summation, PCSPC) are discrete-time behavioural
models, which reproduce their logical behaviour but not their electrical
behaviour.

## Organisation: 512 x 36 in four sub-arrays

| quantity | value | origin |
|---|---|---|
| sub-arrays | 4 | published design |
| rows per sub-array (result bits) | 512 | published design |
| physical columns per sub-array | 12 | published design |
| compute columns per sub-array | 9 (36 inputs in all) | published design |
| spare (inactive) columns per sub-array | 2, chosen at run time | published design |
| bias column per sub-array | 1, always conducting | published design |
| PCSPC rate | one result vector per period (40 MHz in the published design) | published design |
| control clock steps per PCSPC period | 8 | this design |

The matrix is split by columns. Sub-array `s` holds the matrix columns
`9s .. 9s+8` and sees the input bits `x[9s +: 9]`. In every row `r`, each
sub-array produces a partial parity `y'_r`. An XOR tree merges the four
partial parities of a row into `y_r`. Splitting the array this way keeps the
largest row current at 9 + 1 = 10 units, however long the input vector is.
This matters because the analog margin between current levels is what limits
accuracy. Larger problems are meant to be handled with more sub-arrays and a
deeper XOR tree. `N_SUB_P` and `ROWS_P` allow that.

### Spare columns and the bias column

Columns 0..10 of each sub-array can hold data. Two of them are *spares*: their
inputs are held low, so their cells never conduct, whatever those cells
contain. Retiring a column with bad cells means making it a spare and moving
the data off it. The nine logical bits of the sub-array fill the other nine
columns in ascending order. After reset, the spares are columns 9 and 10, so
logical bit `k` drives column `k`.

Column 11 is the **bias column**. Its input is always high, and its cells must
be programmed to 1 in every row, so it adds one unit of current to every row.
The published design uses this to speed up settling. As a side effect, the
PCSPC sees `H + 1` units for `H` ones among the products, so its raw parity is
inverted. The comparator polarity undoes this (see below). **Programming the
bias column is the user's job.** If its cells are not set to 1, every result
bit of that sub-array comes out inverted.

## How a row turns a current into a parity (PCSPC)

This is the least obvious part of the design. In the real circuit, the row
current `I_MC` charges a capacitor `C1`. A threshold detector (the
"V_TH judge") watches `V_charge`. Each time `V_charge` reaches `V_TH`, it fires
a short local-reset pulse (LRC) that discharges `C1`, so `V_charge` becomes a
saw-tooth. The integration time `T` and the capacitance are matched so that
one unit of current over `T` charges `C1` to exactly `V_TH / 2`. So:

* a current of `n` units gives `floor(n/2)` LRC pulses;
* at the end of the integration, `V_charge` is left at `V_TH/2` for odd `n`
  and at 0 for even `n`.

A clocked comparator has `V_ref` (about `V_TH/4`) on its `+` input and
`V_charge` on its `-` input. It fires on the rising edge of the comparator clock
CpC, which comes one step (`t_d`) before the global reset clock GRC clears the
capacitor. Its output is therefore 1 for even `n`. Because of the bias cell,
`n = H + 1`, so the output is 1 exactly when `H` is odd. That is the XOR of the
row.

The model (`pcspc.sv`) works in integer charge units on the control clock:

* each step with GRC low adds `imc` units;
* reaching `VTH = 12` removes 12 units and raises `lrc` for one step;
* GRC high clears the charge.

There are 6 integration steps before CpC rises, so one unit current gives
6 units = `VTH/2`, and `VREF = 3` separates 6 from 0.
Example, 7 units (bias + 6 products, so `H = 6`, even):

| step | 0 | 1 | 2 | 3 | 4 | 5 | → CpC rises |
|---|---|---|---|---|---|---|---|
| V_charge after the step | 7 | 2 (LRC) | 9 | 4 (LRC) | 11 | 6 (LRC) | 6 > 3 → V_XOR = 0 |

The local reset in the model keeps the overshoot (it subtracts `VTH`) instead
of emptying the capacitor. That makes the count exact; in the real circuit the
small charge lost during the reset pulse is part of the analog error budget.

## Modes and timing

`mode_controller` runs two modes.

**Memory mode** (after reset). The PCSPCs are held in reset (GRC high, CpC
low). The input driver becomes the column selector: it drives a one-hot select
of physical column `mem_col` (0..47; sub-array `mem_col / 12`). The row
selector decodes `mem_row`. One cell is written or read per cycle; read data
appears one cycle later with `mem_rvalid`.

**CIM mode.** A phase counter walks through a PCSPC period of 8 control-clock
steps:

| phase | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 |
|---|---|---|---|---|---|---|---|---|
| GRC | 0 | 0 | 0 | 0 | 0 | 0 | 0 | 1 |
| CpC | 0 | 0 | 0 | 0 | 0 | 0 | 1 | 1 |
| event | integrate | | | | | | comparators fire at end | `x_ready`; output buffer captures |

* A vector is accepted in phase 7 (`x_valid && x_ready`) and latched, so the
  columns are stable during the next period.
* `y` and a one-cycle `y_valid` appear 9 cycles after the accepting cycle.
* Vectors can be accepted back to back, one every 8 cycles. With a 320 MHz
  control clock this is the published 40 MHz PCSPC rate: 512 bits × 40 MHz =
  20.48 Gbit/s.
* A switch to memory mode takes effect at the end of a period; the result in
  flight is captured on that same edge. A switch to CIM mode starts in phase 7.

The phase counts, the handshakes and the switching rule are this design's
choices; the published design gives only the order of CpC and GRC and the
40 MHz rate.

## Top-level interface (`rram_nvcim_bmvm`)

| signal | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | control clock; asynchronous active-low reset |
| `mode_req` / `mode` | in / out | 1 | 1 = CIM mode, 0 = memory mode |
| `mem_req`, `mem_we`, `mem_row`, `mem_col`, `mem_wdata` | in | 1,1,9,6,1 | one cell access per accepted cycle |
| `mem_ready`, `mem_rdata`, `mem_rvalid` | out | 1 | access accepted; read data one cycle later |
| `cfg_we`, `cfg_sub`, `cfg_skip0`, `cfg_skip1` | in | 1,2,4,4 | set the two spare columns of a sub-array |
| `cfg_err` | out | 1 | pulse: pair refused (equal, or column 11 or above) |
| `x_valid`, `x` / `x_ready` | in / out | 1, 36 / 1 | input vector handshake |
| `y`, `y_valid` | out | 512, 1 | result and its one-cycle strobe |
| `bias_en` | out | 1 | enable for the analog bias module, high in CIM mode |

A typical session runs in this order:
1. Optionally set spare columns.
2. Program all 512 × 48 cells in memory mode: matrix bits into the data
   columns, 1 into column 11 of every sub-array.
3. Raise `mode_req` and stream vectors.

## Files

| file | block | kind |
|---|---|---|
| `rtl/bmvm_pkg.sv` | sizes, PCSPC timing constants, mode type | package |
| `rtl/and_unit.sv` | AND operation unit (1T1R cell with HRS compensation) | behavioural model |
| `rtl/rram_subarray.sv` | 512 × 12 sub-array with write driver, read buffer and source-line summation | behavioural model |
| `rtl/pcspc.sv` | pulsed current-sensing parity checker | behavioural model |
| `rtl/xor_tree.sv` | merges the partial parities of the sub-arrays | RTL |
| `rtl/ft_input_driver.sv` | fault-tolerant input driver / column selector | RTL |
| `rtl/row_selector.sv` | row address decoder | RTL |
| `rtl/mode_controller.sv` | mode FSM, GRC/CpC generation, handshakes | RTL |
| `rtl/output_buffer.sv` | result and read-data registers | RTL |
| `rtl/rram_nvcim_bmvm.sv` | top level | RTL |
| `tb/tb_<block>.sv` | self-checking testbench of each block | testbench |

The behavioural models are written in synthesizable style, but synthesizing
them does not produce the real circuit. They stand for analog circuits.
Not modelled at all:
* the bias module that sets the cell bias voltages (its enable is the
  `bias_en` port);
* the analog write pulses and sense amplifiers behind the write driver and
  read buffer (the sub-array model only keeps their logical effect).

## Simulating

Each testbench is self-contained and prints
`TB_RESULT checks=<n> failures=<n>`. With Verilator 5, from the directory
holding `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/bmvm_pkg.sv tb/tb_rram_nvcim_bmvm.sv --top-module tb_rram_nvcim_bmvm \
        --Mdir obj -o sim
    ./obj/sim

Swap in any other `tb_<block>` the same way.

`tb_rram_nvcim_bmvm` runs the whole macro at full size (512 × 36) with no
parameter changed. It takes about a minute to build and half a minute to run.
The test:
* sets spare columns on two sub-arrays and tries two illegal pairs;
* programs a random matrix with junk in the spare columns;
* reads cells back;
* streams 90 vectors (back to back and with gaps), checking every result
  bit against `A x mod 2`, the 9-cycle latency and the 8-cycle rate;
* returns to memory mode, moves the spares of another sub-array, reprograms
  it and edits single cells, then checks again.

It counts the mode switches, spare remaps, refused configurations, reads, LRC
pulses and the largest row current (10 units). If any of these never happens,
the test fails.

The block testbenches cover:
* `tb_pcspc`: every current 0..11, checking the LRC count, the residue and
  the comparator;
* `tb_ft_input_driver`: random spare pairs against an independently computed
  column map;
* `tb_mode_controller`: a cycle-by-cycle reference of the GRC/CpC waveform and
  the handshakes.

## Changing the design

* Array size: `N_SUB_P`, `ROWS_P`, `COLS_P`, `N_COMP_P` on the top (defaults
  come from `bmvm_pkg`). The bias column is always the last one, and the
  spares are always two.
* PCSPC timing: `PERIOD_CYC` in `bmvm_pkg`. `INT_CYC`, `VTH` and `VREF`
  follow from it. `VTH` must stay `2 × INT_CYC`, and `VTH` must exceed the
  largest row current; an assertion in `pcspc` checks the second rule.

## Where this model departs from the silicon

* **Ideal analog behaviour.** Cells give exactly 0 or 1 unit; there is no HRS
  leakage, no LRS spread and no comparator offset. In the published design
  these effects give a bit-error rate of about 1.6e-5 per output at 9
  compute columns, which this model cannot reproduce. It always computes the
  exact parity.
* **Discrete-time PCSPC.** Integration is in whole clock steps. `t_d` is one
  step, and CpC falls together with GRC rather than slightly before it.
* **Control interface.** The valid/ready handshake, the memory and
  configuration ports, the reset values of the spares, the fixed position of
  the bias column and the rule for mode switching are this design's own; the
  published design does not describe them.
* **Current levels.** The published text speaks of 10 current levels to
  distinguish, but the row current ranges over 0..10 units (11 levels); the
  model handles 0..11.
