# bitSMM: a bit-serial systolic array for signed matrix multiplication

bitSMM multiplies two integer matrices on a grid of very small multiply-accumulate
(MAC) units. The MACs have no parallel multiplier. Every operand travels as a stream of
single bits, and each MAC only ANDs, adds and shifts. The operand width is chosen at run
time, anywhere from 1 to 16 bits. A product at width `b` therefore costs about `b` cycles
per term, so narrow layers of a neural network finish proportionally sooner. The array was
proposed, as an accelerator for neural-network inference on spacecraft, in *bitSMM: A
bit-Serial Matrix Multiplication Accelerator* (P. Antunes, A. Podobas). This repository is
an independent SystemVerilog implementation of that architecture. It follows the published
description where the description is precise. Every point where it had to fill a gap is
named below.

By default the array has 16 rows and 64 columns of Booth MACs. That is the largest
configuration in the paper, with 1024 MACs and a peak of 1024/`b` operations per cycle. A
full 16-bit product therefore gives 64 OP/cycle, which is 19.2 GOPS at 300 MHz.

## What is computed, and in what order

The array computes `C = X * Y`, where `X` is `ROWS x n` and `Y` is `n x COLS`. The inner
dimension `n` is unbounded. MAC `(r,c)` holds `C[r][c]`. Column `c` receives the elements of
`Y[.][c]`, the **multiplicands**. Row `r` receives the elements of `X[r][.]`, the
**multipliers**. All values are two's complement at width `b`, and results are `ACC_W = 42`
bits wide.

A product takes `(n+1)*b` cycles of streaming. Reading the result out takes
`ROWS*COLS` more cycles, plus one cycle for the read enable. The skew of the array adds no
time, because the readout timing hides it (see below).

## The bit-serial MAC

### Operand windows and the value toggle

Time at a MAC is cut into windows of `b` cycles. In window `k` the MAC receives two things
at once:

* the multiplicand of term `k`, one bit per cycle, **MSb first**;
* the multiplier of term `k-1`, one bit per cycle, **LSb first**.

So a multiplicand arrives one window ahead of its multiplier. The MAC is never told `b`, and
it has no cycle counter. A single wire, the *value toggle* `v_t_i`, changes level at the
first cycle of every window. The MAC XORs the toggle with its registered copy to find window
starts. This keeps switching activity low, since the toggle moves only once per operand.

A stream of `n` terms therefore has these windows:

| window | multiplicand | multiplier |
|---|---|---|
| 0 | `Y[0]` | — |
| 1 .. n-1 | `Y[k]` | `X[k-1]` |
| n | 0 (flush) | `X[n-1]` |
| n+1 | 0 (close) | — |

The result is valid from the first cycle of window `n+1`, which is `(n+1)*b` cycles after
the first bit. Both the flush window and the closing toggle are choices of this
implementation. The paper states the `(n+1)*b` cycle count but does not say how a stream
ends.

### The multiplicand mask (`bsmac_mask`)

This is the least obvious part of the design. Multiplicand bits are shifted into `mc_reg`
from the bottom, one per cycle. While the MAC multiplies with term `k-1`, the bits of term `k`
are already entering the same register, below it. Each new bit pushes the older, complete
multiplicand up one place. In cycle `j` of a window, the multiplicand in use therefore sits
at bits `[j+b-1 : j]`. It is already multiplied by `2^j`, which is exactly the weight of
multiplier bit `j`. No separate shifter is needed.

To pick the multiplicand in use out of `mc_reg`, the circuit keeps two masks:

* The **bit mask** `b_m` gains one more 1 at the bottom in every cycle between toggles. At
  a toggle it therefore holds `b` ones, and it then restarts.
* The **shift mask** `s_m` is loaded with the bit mask at a toggle. After that it shifts
  left one place per cycle, following the multiplicand up the register.

`mc_reg & mask` gives the shifted multiplicand. The bit of `mc_reg` under the top 1 of the
mask is its sign. The bits above the mask are filled with that sign, which sign-extends the
value to the accumulator width. Registers are `2*W = 32` bits wide, so a 16-bit multiplicand
can travel 16 places.

### Multiplication enable (`bsmac_mult_en`)

After reset, the first window carries only a multiplicand. The enable rises with the second
toggle and stays high until reset. It includes a combinational term, so that bit 0 of the
first multiplier is already accepted.

### Booth MAC (`bitSerialMAC_booth`, the default)

The MAC compares the current multiplier bit with the previous one. At the start of a window
the previous bit counts as 0. The pair 10 subtracts the shifted multiplicand, the pair 01
adds it, and 00 or 11 do nothing. One adder does all of this as
`acc + (ml ? ~M : M) + ml`, where the carry-in completes the two's complement on
subtraction. Summed over the `b` bits of a window, the result is `M` times the signed
multiplier.

### SBMwC MAC (`bitSerialMAC_sbmwc`, the alternative)

This MAC uses plain shift-and-add, with a correction for the sign bit. Every 1 bit adds `M`,
except the sign bit, which must subtract it. The MAC cannot know which bit is the last one.
It therefore keeps two accumulators, built from two adders. `acc` assumes the current bit
is an ordinary bit (`base + M`). `result` assumes it is the sign bit (`base - M`).

At a window start the previous product has ended, so `result` becomes the new base. Inside a
window, `acc` is the base. This is why this MAC needs the closing toggle: without it, the
finished value in `result` would be overwritten by `acc`. In the paper's measurements an
SBMwC array needs about twice the FPGA logic of a Booth array of the same size, and has
roughly half its energy efficiency.

## The array (`bitSerialSA`)

* **Converters.** A parallel-to-serial converter (`p2s`) sits on top of every column and
  at the left of every row. When its valid input is high, it stores an operand and then
  shifts it out. Column converters shift left and send bit `b-1` first. Row converters
  shift right and send bit 0 first. Each column converter flips its value toggle on every
  load. The toggle is therefore tied to the multiplicand stream.
* **Pipelines.** Column bits and toggles move down one row per cycle. Row bits move right
  one column per cycle. MAC `(r,c)` therefore sees column data `r` cycles late and row data
  `c` cycles late.
* **Input schedule.** To keep every multiplier exactly one window behind its multiplicand
  at every MAC, the operand source must skew its loads as follows:
  * column `c` loads `Y[k][c]` at cycle `c + k*b`, then zero at `c + n*b` and again at
    `c + (n+1)*b`;
  * row `r` loads `X[r][k]` at cycle `b + r + k*b`.

  Rows or columns that are not needed are simply never loaded, and they read back zero.
* **Reset.** `rst_i` is synchronous, active high and broadcast. It clears everything,
  including the accumulators, and must be applied before each new product.
* **Run-time width.** `bw_i` only affects the converters. The MACs learn the width from
  the spacing of the toggles.

## Reading the results out (`sa_readout`)

The array has a single result port. A one-cycle `rd_en_i` drains the accumulators, one per
cycle, starting one cycle after the enable. The order is a zig-zag over the anti-diagonals
`d = r + c`. It starts at MAC `(0,0)` and ends at `(ROWS-1, COLS-1)`. Odd diagonals are walked
with the row index rising, even diagonals with it falling. For 3x3 the order is:

    (0,0) (0,1) (1,0) (2,0) (1,1) (0,2) (1,2) (2,1) (2,2)

The data run along this path backwards, towards `(0,0)` and the output register. Every MAC
except the last has a 2-input multiplexer, `ROWS*COLS-1` in all. While its enable is high, a
multiplexer inserts its MAC's value. Otherwise it passes on what comes from further along
the path.

The enable is handed from MAC to MAC along the path. It passes through a flip-flop wherever
the path steps to the next diagonal, and goes straight on within a diagonal. It therefore
reaches all MACs of diagonal `d` in cycle `d`. A pipeline register sits on each
link between two MACs of the *same* diagonal. Links between diagonals have no register. In
total there are `(ROWS-1)*(COLS-1)` such registers plus the output register, the count the
paper gives. With this placement, the value of path position `p` leaves the output in cycle
`p+1`, exactly one value per cycle.

The enable must be a single-cycle pulse, and a second drain must wait until the first is
complete. The enable's diagonal timing matches the input skew. The read enable can therefore be
pulsed in cycle `(n+1)*b + 1`, as soon as MAC `(0,0)` has finished. Every later diagonal is
reached just as it finishes.

The register placement and the enable timing are this implementation's reconstruction. The
paper gives the path, the register and multiplexer counts, and the throughput of one value
per cycle. The placement above is the one that meets all of these together.

## Departures from, and additions to, the published description

* **Accumulator width.** The 42-bit width is chosen here. It is sized for dot products of
  up to 1000 16-bit terms, the longest the paper reports testing.
* **Stream ending.** The flush window and the closing toggle at the end of a stream are
  this design's protocol.
* **Toggle source.** The toggle is generated in the column converters and carried in the
  per-row control registers.
* **Gate-level detail.** The internal gate structure of the published MAC schematics was
  not copied. The logic follows the textual description: the mask behaviour, the Booth
  pairs, one adder for Booth, and two adders and two accumulators for SBMwC.
* **Non-square readout.** The readout order for non-square arrays extends the 3x3 example.
  Only 3x3 is shown in the paper.
* **Outside this design.** The operand memory that feeds the converters, and the FPGA clock
  generator, are not part of it.

## Files

| file | contents |
|---|---|
| `rtl/bitsmm_pkg.sv` | widths, MAC variant enum, readout-path functions |
| `rtl/bsmac_mask.sv` | multiplicand mask circuit |
| `rtl/bsmac_mult_en.sv` | multiplication enable |
| `rtl/bitSerialMAC_booth.sv` | Booth MAC |
| `rtl/bitSerialMAC_sbmwc.sv` | SBMwC MAC |
| `rtl/p2s.sv` | parallel-to-serial converter |
| `rtl/sa_readout.sv` | readout network |
| `rtl/bitSerialSA.sv` | the array (top) |

Parameters of `bitSerialSA`:

| parameter | default | meaning |
|---|---|---|
| `ROWS` | 16 | rows of MACs |
| `COLS` | 64 | columns of MACs |
| `W` | 16 | largest operand width |
| `ACC_W` | 42 | result width |
| `MAC_VARIANT` | `MAC_BOOTH` | `MAC_BOOTH` or `MAC_SBMWC` |

The paper's other configurations are `ROWS=4, COLS=16` and `ROWS=8, COLS=32`.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` at the end.

| testbench | what it checks |
|---|---|
| `tb_bitSerialMAC_booth`, `tb_bitSerialMAC_sbmwc` | every operand pair for widths 1..8; 100 random pairs per width 9..16; 200 random dot products; a 1000-term worst case. Results are checked in exactly cycle `(n+1)*b` and while holding afterwards. |
| `tb_bsmac_mask`, `tb_bsmac_mult_en`, `tb_p2s` | the sub-blocks against reference models |
| `tb_sa_readout` | the 3x3 path written out by hand, a 4x6 path, and one value per cycle |
| `tb_bitSerialSA` | random products on a 4x6 Booth array and a 3x5 SBMwC array: all widths, inner dimensions 1..12, partial-array use. It fails if width switching, partial use, full readouts or negative results never occur. |
| `tb_sa_topologies` | the paper's 16x4 (Booth and SBMwC) and 32x8 configurations |
| `tb_bitSerialSA_full` | the default 16x64 array: two complete products (16-bit with `n=4`, 5-bit with `n=3`), all 1024 results |

`tb/sa_harness.sv` holds the array driver that several of these share. It recomputes the
readout path independently of the RTL package.

To simulate with Verilator 5:

    verilator --binary --timing -Irtl -Itb rtl/bitsmm_pkg.sv tb/tb_bitSerialSA.sv \
              --top-module tb_bitSerialSA -o sim && ./obj_dir/sim

Replace the testbench name to run the others. Building the full-size testbench takes about
a minute; running it takes well under a second.
