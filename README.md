# A four-ALU LSTM cell for small FPGAs

This is synthesizable SystemVerilog for a small LSTM inference accelerator.
It predicts the next sample of a time series from the last six samples. The
architecture follows C. Qian, T. Ling and G. Schiele, "Enhancing
Energy-efficiency by Solving the Throughput Bottleneck of LSTM Cells for
Embedded FPGAs" (2022). Their design targets a Spartan-7 XC7S15 at 100 MHz and
was evaluated on traffic-speed prediction. This RTL is an independent
implementation of that architecture, not the authors' code. Where their
description stops, the choices here are my own, and every such choice is
marked below and in the header comment of each file.

## The idea

An LSTM cell keeps a cell state `C` and a hidden state `h`. At every time
step it computes four gate vectors from the same input vector
`v = [x_t, h_{t-1}]`:

    f = sigmoid(W_f v + b_f)    i = sigmoid(W_i v + b_i)
    o = sigmoid(W_o v + b_o)    g = tanh(W_g v + b_g)
    C_t = f * C_{t-1} + i * g   h_t = o * tanh(C_t)      (* is element-wise)

If the cell is computed on one multiply-accumulate unit, almost all of the
time (about 97 %) goes into the four matrix-vector products. The steps of a
sequence depend on each other, so adding cells does not help. This design
shortens the cell instead, with three measures:

1. **Four gate ALUs run in parallel.** ALU1..ALU4 each own one gate's weight
   and bias memories. All four read the same operand `v[k]` from a single
   memory over one shared bus, and each needs one multiplier.
2. **Row pipelining.** A gate vector is not finished before the
   element-wise part starts. As soon as row `n` of all four products is done,
   element `n` goes through the activation tables and a fifth unit (ALU5). It
   computes `C_t[n]` and `h_t[n]` while ALU1..ALU4 already work on row `n+1`.
3. **Shared activation tables.** There is one sigmoid table and one tanh table
   of 256 entries each. Multiplexers share them in time: the sigmoid serves
   f, i and o, and the tanh serves g and C.

ALU5 has three multipliers, and the dense output layer has one more. Together
with ALU1..ALU4 that makes eight multipliers, which is the published DSP count.

## Number format

All data are signed 16-bit fixed point with 8 fractional bits (Q8.8, range
-128 .. +127.996, LSB 1/256). The published design uses this same (8, 16)
format. The constants `DATA_W` and `FRAC_W` in `lstm_pkg` change it for the
whole design. The rounding rules are my own:

* A matrix row keeps its products at full precision in a 40-bit accumulator.
  The bias enters as the accumulator's start value, shifted left by 8.
* Every result that goes back to 16 bits is shifted right by 8 (rounding
  towards minus infinity) and saturated (`lstm_pkg::fx_narrow`).
  `C_t = f*C + i*g` is narrowed once, after the addition.

## One recursion, cycle by cycle

This is the core of the design (`lstm_cell_ctrl`). Let `N = N_I + N_H` be the
length of `v` (21 at the defaults). One recursion is split into `N_H + 1`
*slots*, and each slot is `2N` cycles long (42 cycles).

```
slot:      0            1            2       ...     N_H-1          N_H
ALU1..4:  row 0        row 1        row 2    ...     row N_H-1      -
tail:      -          elem 0       elem 1    ...     elem N_H-2     elem N_H-1
```

**MAC part (slots 0 .. N_H-1).** In cycle `2k` the controller reads `v[k]`
from the operand memory, and the weights `W_*[n][k]` and biases `b_*[n]` from
the four ROMs. All of these memories have a registered read port. In cycle
`2k+1` the data arrive and all four ALUs multiply-accumulate. So each ALU
takes two cycles per product, which is the factor 2 in the published timing
model. After the last product the four results `nact_f/i/o/g[n]` are
registered. They stay stable for the whole next slot.

**Tail (slots 1 .. N_H), element m = slot-1**, in the first 8 cycles of the
slot:

| cycle | action |
|---|---|
| 0 | S1 = f into the sigmoid table, S2 = g into the tanh table, read `C_{t-1}[m]` |
| 1 | S1 = i into the sigmoid table |
| 2 | S1 = o into the sigmoid table (f and g are now in their registers) |
| 3 | ALU5 with S3 = C: `C_t[m] = f*C_{t-1}[m] + i*g` |
| 4 | `C_t[m]` written back to the C memory; S2 = C into the tanh table |
| 6 | ALU5 with S3 = h: `h_t[m] = o*tanh(C_t[m])` |
| 7 | `h_t[m]` written into the spare h bank |

The tables have a one-cycle read latency, and a value that comes out of a
table is registered before it is used. Hence the gaps in the table. The
tail must fit into one slot, so `2N >= 8`, that is `N_I + N_H >= 4`. With one
input, the smallest hidden size is 3, which is the same limit the published
design states.

**Length.** A recursion takes exactly `2 (N_I + N_H)(N_H + 1)` cycles: 882 at
the defaults. The controller accepts the next `start` in the last cycle of a
recursion, so the steps of a sequence run back to back with no idle cycle.

**Why two h banks.** Rows `n+1 ..` still need all of `h_{t-1}`, but `h_t[n]`
is already being produced. So `xh_mem` keeps two banks for h. ALU reads use
the current bank and writes of `h_t` go to the other one. At the end of the
recursion the two banks swap roles. `C` does not need a second copy:
`C_t[m]` depends only on `C_{t-1}[m]`, and that element is read before it is
overwritten.

## Whole inference and its timing

`lstm_model` chains `lstm_layer` with `dense_layer`. `lstm_layer` runs the
one cell over the `N_STEP = 6` inputs and holds the input buffer.
`dense_layer` computes `y = W h + b` on one MAC. It has no output activation,
because this is a regression model.

* LSTM layer: `n_ll = N_STEP * 2 (N_I + N_H)(N_H + 1) = 6 * 882 = 5292` cycles.
* Dense layer: `n_dense = 2 * N_H * N_O = 40` cycles. It reads `h_t` through
  the second read port of the operand memory.
* `done` comes `n_ll + n_dense + 2 = 5334` cycles after `start`. The
  published timing model says 5332. The two extra cycles are the hand-over
  into the dense layer and its output register. At 100 MHz this is 53.3 us
  per inference, about 18 700 inferences per second. The authors measured
  57.25 us on their hardware; what lies behind that difference is not known
  and is not modelled here.

The published text also gives "860 cycles" for one recursion. That figure
does not agree with the published timing equation (882 cycles), which
reproduces their total of 5332. This design follows the equation.

## Host interface (my own choice)

The published work does not describe how the host microcontroller talks to
the FPGA. The top level has a plain parallel interface:

| port | dir | meaning |
|---|---|---|
| `x_we`, `x_addr`, `x_data` | in | write input sample `x_data` (Q8.8) at `x_addr = step * N_I + feature`; step 0 is the oldest sample |
| `start` | in | begin an inference (ignored while `busy`) |
| `busy` | out | an inference is running |
| `done` | out | one-cycle pulse; `y` is valid from this cycle on |
| `y[N_O]` | out | prediction(s), Q8.8, held until the next inference |

Every inference starts from `C_0 = h_0 = 0`. The input buffer must not be
written while `busy` is high; an assertion checks this.

## Parameters and memories

Weights and biases sit in read-only memories (`param_rom`), one per gate
matrix and one per bias vector, next to the ALU that uses them. They are fixed
at configuration time, so there is no circuit for loading parameters.
The trained parameters of the published model are not available. The ROMs
are filled by `lstm_pkg::param_value(id, address)`, which returns a fixed
pseudo-random set of small values: weights with |w| < 0.25 and biases with
|b| < 0.5. **To run a trained model, replace that function**, for example with
a case table or with the result of a `$readmemh`. The ROM layout for a cell
gate is `address = n * (N_I + N_H) + k`, where `k = 0 .. N_I-1` are the inputs
and `k = N_I + j` is `h[j]`. The dense weights use `address = o * N_H + k`.
The ROM ids are 0..3 for `W_f, W_i, W_o, W_g`, 4..7 for the matching biases,
8 for the dense weights and 9 for the dense bias.

## Activation tables (my own sampling)

The published design gives only the depth, 256, and says that 64 and 128 gave
clearly worse accuracy. The tables here divide a fixed input interval into
`DEPTH` equal bins. Sigmoid covers [-8, 8), a bin width of 1/16. Tanh covers
[-4, 4), a bin width of 1/32. Each entry holds the function value at the
centre of its bin, rounded to the nearest LSB. Inputs outside the interval
use the first or last entry. The tables are computed during elaboration from
`$exp`, so no data file is needed. The `DEPTH` parameter of `lstm_model`
accepts 64, 128 or 256. The tables are read synchronously, like block RAM.
Because of that, the multiplexer that takes a table's output uses the select
delayed by one cycle.

## Files

| file | block |
|---|---|
| `rtl/lstm_pkg.sv` | format, select enums (S1, S2, S3), narrowing, parameter contents |
| `rtl/lstm_model.sv` | top: LSTM layer + dense layer |
| `rtl/lstm_layer.sv` | input buffer, sequencing of the time steps |
| `rtl/lstm_cell.sv` | the cell: wiring of everything below |
| `rtl/lstm_cell_ctrl.sv` | slot/tail schedule, addresses, S1/S2/S3 |
| `rtl/lstm_mac_alu.sv` | ALU1..ALU4 (and the dense MAC) |
| `rtl/lstm_alu5.sv` | ALU5: `C_t` and `h_t` |
| `rtl/lstm_act_unit.sv` | S1/S2 multiplexers, the shared tables, activated-value registers |
| `rtl/sigmoid_lut.sv`, `rtl/tanh_lut.sv` | the tables |
| `rtl/xh_mem.sv` | `[x_t, h_{t-1}]` operand memory with two h banks |
| `rtl/c_mem.sv` | cell-state memory |
| `rtl/param_rom.sv` | weight / bias ROM |
| `rtl/dense_layer.sv` | output layer |

## Simulating

Each block has a self-checking testbench `tb/tb_<module>.sv`. Each one ends by
printing `TB_RESULT checks=N failures=M`. `tb/tb_lstm_ref_pkg.sv` is an
independent bit-exact software model of the arithmetic: integer fixed point,
and the tables evaluated directly with `$exp`. The cell, layer and top
testbenches compare against it. For example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_lstm_model \
  -Irtl -Itb -y rtl -y tb +libext+.sv rtl/lstm_pkg.sv tb/tb_lstm_ref_pkg.sv tb/tb_lstm_model.sv
./obj_dir/Vtb_lstm_model
```

`tb_lstm_model` runs the top at its default size, the published
configuration. It runs five complete inferences and checks each prediction
bit-exactly and the 5334-cycle latency. It also counts how often each
mechanism is exercised: row/tail overlap, every S1/S2/S3 selection,
back-to-back recursions, bank swaps, state clears, clamping in both tables,
and the dense layer. `tb_lstm_model_sizes` runs complete inferences with
64- and 128-entry tables and with hidden size 3, both with one input (where
the tail fills a slot exactly) and with two inputs and two outputs.
`tb_lstm_cell` and `tb_lstm_layer` check the 882-cycle
recursion and the 5292-cycle layer. `tb_lstm_cell_ctrl` checks the schedule
above cycle by cycle. Every test runs in well under a second.

## How far to trust it

* The arithmetic matches the independent reference bit for bit in all tests.
  The reference implements *my* rounding and table rules, so the tests cannot
  show that these are the rules of the original hardware.
* Prediction quality has not been measured. Without the trained weights, the
  published mean squared errors (0.1659 on FPGA with 256-entry tables) cannot
  be reproduced.
* The cycle counts equal the published timing model (plus the 2 hand-over
  cycles). The published model counts the same cycles, but the cycle-level
  schedule inside a slot is my own.
* Not included: the link to the host microcontroller, and any power or
  resource figures. Those belong to the FPGA toolchain.
