# Stochastic in-memory multiplier on SOT-MRAM

Multiplication is the operation that processing-in-memory handles worst: built
from in-memory Boolean row operations, an 8-bit multiply costs well over a
hundred cycles. This design multiplies by stochastic computing instead, and
lets the memory itself produce the random bits. A spin-orbit-torque MRAM cell
hit by a write pulse near its critical current switches only with some
probability, and that probability depends on the pulse width. Preset a group
of cells to 1, hit the group with a pulse that encodes `x`, then one that
encodes `w`. A cell is still 1 only if it survived both pulses, so the
fraction of ones left is `P(x) * P(w)`. Counting the ones gives the product.
No random-number generators and no AND gates are needed, and every cell of
the group works in parallel.

The RTL here implements that engine as a multiply-accumulate unit. It takes
10-bit operands, represents each product by 1024 cells, and can hold up to
128 products. The cells and the pulse generator are analog parts, so they are
behavioural models. Everything else is synthesizable logic.

## From operand to pulse width: the logarithm table

A cell survives a pulse of width `tau` (ns) at drive current `I` with

    P_usw = exp(-tau * k),   k = exp(-Delta * (1 - I/Ic))      [1/ns]

This is exponential in `tau`. For the survival probability to equal
`x / 2^N`, the pulse must therefore be `tau = -ln(x / 2^N) / k`. `ln_lut`
stores that width for every operand, counted in steps of the pulse
generator:

    code(x) = round( S * log2(2^N / x) ),     S = ln 2 / (k * t_step)
    code(0) = 255 (the longest pulse: practically every cell switches)

With `Delta = 60.9`, `Ic = 80 uA`, `I = 81 uA` and `t_step = 22 ps`,
`k = 2.141 /ns` and `S = 14.716` steps per halving. `S` is held as `3767/256`.
A 0.3 ns pulse then leaves about half the cells at 1. That is the operating
point the device should be scaled to, because it keeps the pulses short and
the bitstream neither sparse nor dense. Codes run from 0 (`x = 1023`, no
pulse) to 147 (`x = 1`, 3.2 ns). The table is a 1024 x 8 ROM. It is filled at
elaboration from an integer-only log2 (repeated squaring of the mantissa, 16
fraction bits), so no data file is needed.

Rounding to 22 ps steps moves each factor by up to ±2.4 %. That is a
systematic error per operand value, on top of the random spread.

## The stochastic array (`sot_mram_xpoint`, behavioural)

The array is a cross-point arrangement. Each row has its own source driver,
and each bit line has a sense amplifier. Cells need no access transistor, so
a whole row is written at once, and 8 rows at once form a group of
8 x 128 = 1024 cells that holds one product. There are 128 groups.

* **Preset**: a deterministic write of ones to a group, in one clock cycle.
* **Pulse**: the model measures the width of `v_t` in simulated time. When
  the pulse falls, each cell of the selected group that is still 1 switches
  to 0 with probability `1 - P_usw(tau)`, drawn with `$urandom`.
* **Read**: the whole group is visible on `rd_bits` with no latency. Row `r`
  is at bits `[r*128 +: 128]`.

The model does not include IR drop along a row, which is what limits row
length in a real array.

By default every cell has the same critical current. With `SIGMA_IC > 0`, a
parameter of both the array and the top, each cell sees its own critical
current `Ic * (1 + SIGMA_IC * g)` for each pulse. Here `g` is a standard
normal number, clipped to ±6. This lumps manufacturing spread and thermal
fluctuation into one draw. On average, a cell then survives a pulse with
`P_usw` averaged over the spread. Because `P_usw` is so steep in `Ic`, widely spread cells either
switch almost surely or hardly at all. The mean moves only a little, even at
10 %, and the product keeps its binomial spread.

## Pulse scale (`pulse_norm`)

The table is built for one switching rate `k`. Real cells can switch faster
or slower, for example at another drive current or with a spread of critical
currents. Every pulse must then change length by the same factor. Between the
table and the DTC, `pulse_norm` multiplies each code by the top-level input
`norm_scale`, an unsigned number where 256 means 1.0:

    code' = min(255, round(code * norm_scale / 256)),   code 255 kept as 255

Keeping 255 means a zero operand still switches every cell. The unit is
combinational, so it adds no cycle. At 256 it passes codes unchanged. Other
values raise each survival probability to that power: 384 turns `P` into
`P^1.5`. The same factor can also move the working point, for example
towards `P_usw = 0.5`. Hold `norm_scale` stable during an operation.

## Pulse generator (`dtc`, behavioural)

`dtc` is a digital-to-time converter with a 22 ps step. On a clock edge with
`trig`, it samples `code` and drives `v_t` high for `code * 22 ps`. `busy`
covers the pulse. Logic sees `busy` from the edge after the trigger onward,
so the controller ignores it for one cycle. The engine has one lookup table
and one DTC, shared by the two operands in turn.

## Counting the ones: two strategies

The result of a product is the number of ones in its group. The count is
about `1024 * (x/1024) * (w/1024) = x*w/1024`. The engine adds these counts
over all products of a multiply-accumulate. The mode is chosen per
operation:

* **APC** (`mode = 0`, `apc`): a fully parallel adder tree counts the 1024
  bits of a group in one cycle, right after the product's second pulse. The
  count is added to the accumulator while the next product starts. This is
  the fast option and costs area. The counter it stands for is an
  approximate one whose approximation is unspecified, so this one counts
  exactly.
* **CSA + FA** (`mode = 1`, `csa_popcount`): products stay in their groups
  until the last one is written. Then there are two steps:
  1. **Row-wise sum.** Every row of every used group is added, one row per
     cycle, into 128 column counters. The counters are stored as 11
     bit-planes, and a row is added by a chain of bitwise half-adds. This is
     the same operation for all columns at once, which is what an in-memory
     carry-save adder does.
  2. **Column-wise sum.** A full adder sums the 128 column counts, one per
     cycle.

  Step 2 is paid once per accumulation, so its cost per product shrinks as
  accumulations get longer.

## Sequencing and timing (`sc_controller`)

The clock is taken as the memory cycle, 1 ns in the testbenches. Pulse
widths are absolute times, so a pulse occupies `max(1, floor(width/1 ns))`
wait cycles. Per product:

| cycle(s) | action |
|---|---|
| 1 | read pair `i` from `operand_mem` |
| 1 | look up `code(x)`; preset group `i` |
| 1 | trigger the DTC with `code(x)`; look up `code(w)` (this lookup overlaps `x`'s pulse) |
| 1 + wait | guard cycle, then wait for the end of the pulse |
| 1 | trigger the DTC with `code(w)` |
| 1 + wait | guard cycle, then wait for the end of the pulse |
| 1 | APC mode only: count the group |

That is 6 cycles, plus the two pulse waits, plus 1 in APC mode. An operation
ends with 3 cycles in APC mode. In CSA mode it ends with `8 * n` row cycles
plus 132 cycles. Measured on random 10-bit operands:

| products in the MAC | 10 | 20 | 40 | 70 | 100 | 128 |
|---|---|---|---|---|---|---|
| CSA+FA, cycles/product | 29.2 | 22.6 | 19.3 | 17.9 | 17.4 | 17.1 |
| APC, cycles/product | 9.3 | 9.2 | 9.1 | 9.1 | 9.1 | 9.1 |

The CSA figure falls towards the per-product cost plus 8 row cycles. The APC
figure does not depend on operand width, because all 2^N bits are written in
parallel. Both schedules are this implementation's own. The absolute cycle
counts depend on the assumed 1 ns clock and on the one-row-per-cycle CSA.

## Weights stored as stochastic bits

Often one operand is reused, like a weight in a neural network. That operand
can be converted once and kept in the array, which is non-volatile.
`op = OP_LOAD_W` presets group `i` and applies only `w_i`'s pulse, leaving
`w_i` stored as surviving ones. A later `op = OP_MAC_PRE` applies only
`x_i`'s pulse to group `i`, with no preset, and counts. The product
`P(w)·P(x)` is the same as before, but each product costs one pulse instead
of two: 4 cycles plus the pulse wait, plus 1 in APC mode. That is about 6
cycles per product against 9 for `OP_MAC`. The `x` pulse switches cells, so a
stored weight serves one multiplication and must be loaded again after it.

## Top level (`sc_pim_engine`) and its interface

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `op_we`, `op_waddr`, `op_wx`, `op_ww` | in | 1, 7, 10, 10 | load operand pair `(x, w)` at an address |
| `norm_scale` | in | 10 | pulse scale, 256 = 1.0 (see `pulse_norm`) |
| `start`, `num_mul`, `mode`, `op` | in | 1, 8, 1, 2 | start an operation over pairs `0 .. num_mul-1` (0..128); `mode` 0 = APC, 1 = CSA+FA; `op` 0 = multiply-accumulate, 1 = store weights, 2 = multiply-accumulate onto stored weights |
| `busy` | out | 1 | operation running |
| `done` | out | 1 | one-cycle pulse; `result` valid |
| `result` | out | 18 | sum of counts, about `sum(x_i * w_i) / 1024` (0 after storing weights) |
| `cycles` | out | 32 | length of the last operation in cycles |
| `v_t` | out | 1 | the write pulse, for observation |

Parameters (defaults): `N = 10`, `COLS_P = 128`, `ROWS_P = 8`,
`GROUPS_P = 128`, `CODE_BW = 8`, `S_Q8 = 3767`, `T_RES = 22`,
`SIGMA_IC = 0.0`, `NORM_W = 10`. Shared constants and the table formula are in `sc_pim_pkg`. If `N`, the geometry or
the device constants change, `S_Q8` must be recomputed with the formula
above, and the array model's `I_UA`, `IC_UA` and `DELTA` must agree with it.

## What follows the source design and what does not

These parts follow the source design:

* The conversion chain (binary, then log, then pulse width, then stochastic
  bits, then count).
* The shared LUT and DTC, and the 22 ps step.
* The switching law and its constants, with 81 uA being one of the device's
  characterised currents.
* Preset to 1, then two pulses, with survivors meaning 1.
* Multi-row writes of a group.
* 10-bit operands with 1024 bits per product.
* The two pop-count strategies, with CSA row-wise first and FA column-wise
  last.
* The lookup of `w` overlapping the pulse of `x`.
* The deferred count in CSA mode.
* Weights converted ahead of time and multiplied by `x` pulses alone.
* The 100-product MAC as the evaluated case.

These are this implementation's own choices:

* The array geometry (128 cells per row, 8 rows and one group per product,
  128 groups).
* The table scale `S` and the code for zero.
* The 1 ns clock and all handshakes.
* Exact counting in place of the approximate counter.
* The bit-plane form of the CSA.
* The per-operation `mode` and `op` inputs.
* The circuit of the pulse-scale unit. The source design only names
  normalization units that scale the pulse duration.
* The per-pulse draw of critical-current spread.

These are not built:

* IR drop along a row, and spread in the pulse generator's widths.
* A run-time correction for the mean shift that critical-current spread
  causes. The table assumes no spread.
* Multiplications wider than 10 bits. A 16-bit operand would need a
  65536-word table and 65536 cells per product.
* Accumulations longer than 128 products.

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`:

* `tb_pulse_norm`: all 256 codes at 65 scales, against real arithmetic.
* `tb_ln_lut`: all 1024 table words against a real-arithmetic reference.
* `tb_operand_mem`: write, read back, read-during-write.
* `tb_dtc`: pulse widths to within 0.5 ps, `busy`, no pulse for code 0 or
  without a trigger.
* `tb_sot_mram_xpoint`: counts after one, two and long pulses against the
  switching law, to within 5 sigma over 40 trials, with other groups left
  alone.
* `tb_apc`: random and corner vectors, with a one-cycle latency.
* `tb_csa_popcount`: batches of up to 1024 rows, with the column pass taking
  exactly 129 cycles.
* `tb_sc_pim_engine`: end to end at the default sizes, and also the
  controller's test. It covers single products, zero and full-scale
  operands, 100- and 128-product MACs in both modes, stored weights followed
  by multiplication onto them, pulse scales of 1.5 and 0.75, and an empty
  operation.
  Results are checked against an independent statistical expectation (5
  sigma) and against the exact product sum. Cycle counts are checked against
  the schedule above. Every mechanism must occur at least once.
* `tb_mc_accuracy`: 1000 repetitions of one product with 0.308 ns and
  0.396 ns pulses. It finds no bias and a spread of 1.31 % of full scale,
  against 1.30 % for a binomial with 1024 cells.
* `tb_mac_sweep`: the cycles-per-product table above.
* `tb_ic_variation`: the Monte Carlo product with 0, 2, 5 and 10 %
  critical-current spread. Each mean is checked against a numerical average
  of the switching law over the spread, and each spread against the binomial
  one. At 10 % the measured shift from the spread-free product is about 1 %
  of full scale. The spread stays near 1.2 to 1.3 %.

`sc_controller` also carries assertions for its handshake rules. The DTC is
never triggered while busy, a command never asks for more products than the
array holds, and op code 3 is reserved. They are active in any simulation run
with assertions enabled.

The testbenches are statistical, so they pass for any seed with a very high
probability, not with certainty.

To simulate with Verilator 5, from the folder that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb --top-module tb_sc_pim_engine \
        rtl/sc_pim_pkg.sv rtl/sc_pim_engine.sv tb/tb_sc_pim_engine.sv -o sim
    ./obj_dir/sim

Replace the top module and file for any other testbench. Verilator finds the
remaining modules in `rtl/` by name. The end-to-end test runs in well under a
second. `dtc` and `sot_mram_xpoint` need `--timing`, and they are not meant
for synthesis. The rest of `rtl/` is synthesizable.
