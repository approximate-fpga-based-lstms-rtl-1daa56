# An approximate LSTM accelerator built on iterative rank-1 refinement

An LSTM cell spends almost all of its work on four matrix-vector products, one
per gate. Each gate multiplies an R x C weight matrix by the augmented input
x~ = [x(t); h(t-1)]. This design never stores or streams those matrices.
Offline, each gate matrix W is replaced by a short sum of rank-1 terms:

    W  ~  sum_{n=1..N} sigma(n) * u(n) * (f(n) o v(n))^T

Term n is the leading singular triplet of the error left over by terms
1..n-1. Its right vector v(n) is pruned to its NZ largest-magnitude entries
(the binary mask f(n)). The gate output is then

    y = sum_n sigma(n) * u(n) * ( sum_{j in mask} v(n)[j] * x~[j] )

Each refinement step costs one sparse dot product of length NZ and one
scalar-times-vector of length R, instead of a dense R x C product. The
approximation improves with every step. How many steps to run is a
throughput/accuracy knob: a system under a deadline can stop early and still
get a usable h(t).

The RTL here is the hardware half of that scheme:

- four gate units run in parallel, one per LSTM gate;
- each gate unit has a TC-wide sparse dot-product unit, a sigma multiplier,
  a TR-wide multiplier array for u, and TR accumulators that sum over the
  refinement steps;
- an elementwise stage applies sigmoid/tanh and forms c(t) and h(t);
- all arithmetic is IEEE-754 single precision.

The SVD and pruning themselves run offline and are not part of the RTL.
Their outputs are sigma, u, and the non-zero v values with their column
indices. The RTL takes them as valid/ready streams, one per gate, from
whatever memory system holds them.

Default configuration: R = 512 hidden units, C = 2R = 1024 (x and h both 512
wide), NZ = 512 non-zeros per v (50 % column sparsity), TR = 32, TC = 1. This
is the point chosen for an image-captioning LSTM on a Zynq-class FPGA at
100 MHz.

## Equations implemented

Per time step, with gates numbered 0 = input, 1 = forget, 2 = cell,
3 = output:

    y_g  = sum_{n=1..n_steps} sigma_g(n) u_g(n) (v_g(n)^T x~)     g = 0..3
    i = sigmoid(y_0)   f = sigmoid(y_1)   g = tanh(y_2)   o = sigmoid(y_3)
    c(t) = f * c(t-1) + i * g
    h(t) = c(t) * o

There is no tanh on c(t) before the output multiplication. This is the
variant used by the image-captioning model the configuration targets, not
the textbook `h = o * tanh(c)`.

## The gate unit: how one refinement step flows

This is the part of the design that sets performance, so it gets the most
detail.

```
 v stream (TC values + TC indices, sigma)         u stream (TR values)
      |                                                 |
      v                                                 v
 +-----------------------------+   hand-off   +----------------------------+
 | dot_product_unit            |   register   | accum_mult_array           |
 |  idx -> x~ buffer (1 cycle) |--s, first,-->|  TR x fp32_mul (s * u)     |
 |  TC x fp32_mul, adder_tree  |   last       |  TR x fp32_add (+ partial) |
 |  running fp32 sum           |<---pop-------|  R/TR x TR partial sums    |
 |  x sigma on the last tile   |              |  rd_row -> rd_data         |
 +-----------------------------+              +----------------------------+
```

**Dot product.** The unit accepts one tile of TC (value, index) pairs per
cycle. In the same cycle the indices address the x~ buffer, whose read ports
are registered. One cycle later the TC products go through a balanced fp32
adder tree and into a running sum. The first tile of a step overwrites the
sum instead of adding to it, so no clearing cycles are needed. A step is
NZ/TC tiles. On the last tile the sum is multiplied by sigma, which travels
on the v stream with that tile. The result is put in a one-entry hand-off
register together with two flags: first step and last step.

**Overlap between steps.** The hand-off register decouples the two halves.
While the multiplier array works through the R/TR u tiles of step n, the
dot-product unit is already consuming the v tiles of step n+1. The unit only
waits when it reaches the last tile of a step and the previous scalar has
not yet been taken (v_ready goes low on that tile). In steady state, steps
therefore follow each other every max(NZ/TC, R/TR) cycles. The first
result appears NZ/TC + 1 cycles after the first tile.

**Multiply and accumulate.** While the scalar is held, u tiles are accepted
one per cycle (u_ready = scalar present). Lane k computes `s * u[k]` and adds
it to row `row`, lane k of the partial sums; on the first step it writes the
product instead. The scalar is popped with the last of the R/TR tiles. `done`
pulses one cycle after the last tile of the last step. Because u is consumed
strictly in order and the row counter wraps, row r of the partial sums
always receives elements r*TR .. r*TR+TR-1 of u.

**Step count.** `n_steps` is given at run time with `start` and must be at
least 1. The host may pick any count up to the number of refinement terms it
has stored. This is how a computation-time budget is traded for accuracy.

At the defaults (NZ/TC = 512, R/TR = 16), the dot product is the bottleneck
by a factor of 32. The u side idles most of the time, which is why the
chosen tiling puts all its parallelism into TR.

## Around the gate units

**x~ buffer** (`xtilde_buffer`). Holds the C words of x~ = [x(t); h(t-1)].
It is written one row of TR words per cycle. It has 4*TC registered read
ports, one per dot-product lane of each gate. Element j of x~ is word j of
the array. x(t) occupies words 0 .. C-R-1 and h(t-1) the top R words.

**Cell-state buffer** (`cell_state_buffer`). Holds c as R/TR rows of TR.
c(t) stays on chip and is also streamed out. Row reads are combinational.

**Elementwise stage** (`elementwise_unit`). Processes one row of TR lanes
per cycle. It has four nonlinearity lanes per element, then three fp32
multiplier arrays (f*c, i*g, c*o) and one fp32 adder array (c). The results
are registered and offered on the output stream with valid/ready. When the
output is back-pressured, the stage stops taking rows.

**Nonlinearities** (`sigmoid_unit`, `tanh_unit`). Both use the
piecewise-linear PLAN approximation. The slopes are powers of two, so only
shifts and adds are needed:

| |x|            | sigmoid(|x|)      |
|----------------|-------------------|
| 0 .. 1         | |x|/4 + 0.5       |
| 1 .. 2.375     | |x|/8 + 0.625     |
| 2.375 .. 5     | |x|/32 + 0.84375  |
| >= 5           | 1                 |

For negative inputs the result is 1 - sigmoid(|x|). The input is converted
to Q3.16 fixed point (saturating at 8), and the Q0.16 result is converted
back to fp32 exactly. tanh(x) is computed as 2*sigmoid(2x) - 1, using odd
symmetry. Worst-case errors against the exact functions are about 0.019
(sigmoid) and 0.04 (tanh). Swap these two modules to change the accuracy
without touching anything else.

**Controller** (`lstm_controller`). Runs one time step in four phases:

1. LOAD: take (C-R)/TR rows of x(t).
2. CLEAR: only when `new_seq` is set, zero the h part of x~ in R/TR cycles.
   `new_seq` also makes c(t-1) read as zero.
3. GATES: pulse `start` to the four gate units and wait for all four `done`.
4. ELEM: issue the R/TR rows to the elementwise stage.

As each result row leaves on the output stream, h(t) is written into the top
of x~ and c(t) into the cell-state buffer. Time steps are not overlapped,
because h(t) is an input of step t+1.

## Interface of `lstm_top`

All streams are valid/ready. A beat transfers when both are high on a rising
clock edge. Reset is synchronous and active low; it clears control state
only.

| Port group | Per beat | Beats per time step |
|---|---|---|
| `start`, `new_seq`, `n_steps` (16 bit) | pulse `start` while `busy` is low | 1 |
| `x_valid/x_ready/x_data[TR]` | TR words of x(t), in order | (C-R)/TR |
| `v_valid[g]/v_ready[g]/v_val[g][TC]/v_idx[g][TC]/v_sigma[g]` | TC non-zero v values and their indices into x~; `v_sigma` is sampled on the last tile of each step | n_steps * NZ/TC per gate |
| `u_valid[g]/u_ready[g]/u_data[g][TR]` | TR consecutive elements of u, in order | n_steps * R/TR per gate |
| `out_valid/out_ready/out_row/out_h[TR]/out_c[TR]` | one row of h(t) and c(t) | R/TR |
| `busy`, `done` | `done` pulses after the last output row | |

Index `g` is the gate: 0 input, 1 forget, 2 cell, 3 output. Indices in
`v_idx` address x~: 0 .. C-R-1 select x(t), C-R .. C-1 select h(t-1). A
pruned model with fewer non-zeros than NZ can be padded with zero values at
any index.

With streams that never stall, a time step takes about
(C-R)/TR + n_steps * max(NZ/TC, R/TR) + R/TR + R/TR cycles, plus a few
cycles of pipeline. At the defaults that is about 48 + 512 * n_steps
cycles: 5.1 us per refinement step at 100 MHz.

## Parameters

| Parameter | Default | Meaning |
|---|---|---|
| `R` | 512 | hidden size (rows of each gate matrix) |
| `C` | 1024 | length of x~ = input size + R |
| `NZ` | 512 | non-zeros kept per v vector |
| `TR` | 32 | lanes of the u multiplier, accumulator and elementwise arrays |
| `TC` | 1 | lanes of the dot-product unit |
| `STEPS_W` | 16 | width of the refinement-step counter |

R must be a multiple of TR, C a multiple of TR, and NZ a multiple of TC.

## Number format

All datapath values are IEEE-754 binary32. `fp32_mul` and `fp32_add` round
to nearest, ties to even. They flush subnormal inputs and results to zero,
saturate overflow to infinity, and do not produce NaN. Both adders and
multipliers are combinational. One cycle of the dot-product path contains a
multiplier, the adder tree, the accumulating adder and the sigma multiplier.
One cycle of the elementwise path contains a nonlinearity, two multipliers,
an adder and a third multiplier. This is correct at any clock, but it will
not reach 100 MHz on an FPGA as written. A production build would pipeline
the FP units and, for TC = 1, interleave the accumulation across several
partial sums.

## What comes from the reference architecture and what is this design's own

Taken from the reference architecture:

- four gate units in parallel, each running the rank-1 refinement sum;
- a dot product unrolled by TC, followed by a single sigma multiplier, a
  TR-wide multiplier array for u and TR accumulators across steps;
- sigmoid on the input, forget and output gates and tanh on the cell gate;
- three TR-wide multiplier arrays and one adder array for c and h;
- x~ kept on chip for the whole time step;
- h and c written back every step;
- single precision throughout;
- the default sizes.

Chosen here, where the reference is silent:

- the stream formats and handshakes, and sending each non-zero v value with
  its column index (the reference's memory-traffic model counts no index
  bytes);
- the one-entry hand-off register that overlaps consecutive steps;
- storing the R partial sums inside the accumulator array;
- keeping c on chip;
- the controller and its LOAD/CLEAR/GATES/ELEM sequence, and zeroing h(0)
  and c(0) with `new_seq`;
- `n_steps` as a run-time input;
- the PLAN nonlinearities;
- the rounding and special-value policy;
- combinational FP units.

Known departures:

- The reference performance model lets the elementwise stage of one time
  step overlap the gate stage of the next, and charges 37R/Tr cycles for the
  elementwise work. Here the stages run one after the other, and the
  elementwise stage takes R/TR cycles.
- The text numbers the gates input, forget, output, cell in its equations.
  The block diagram routes its third gate into tanh. The ports follow the
  diagram: input, forget, cell, output.
- The reference also describes the design-time flow around this hardware:
  the SVD and mask precomputation, a roofline search over (TR, TC), and the
  choice of NZ and step count by application accuracy. None of that is
  hardware, so none of it is here. Neither is a DRAM controller: the v/u
  streams and the output stream are where one would connect.

## Files

Each file starts with a comment block on its function, timing and interface.

- `rtl/lstm_pkg.sv`: fp32 type, gate numbering, x~ write-source enum, PLAN
  helper functions.
- `rtl/fp32_mul.sv`, `rtl/fp32_add.sv`, `rtl/adder_tree.sv`: arithmetic.
- `rtl/sigmoid_unit.sv`, `rtl/tanh_unit.sv`: nonlinearity lanes.
- `rtl/xtilde_buffer.sv`, `rtl/cell_state_buffer.sv`: on-chip storage.
- `rtl/dot_product_unit.sv`, `rtl/accum_mult_array.sv`, `rtl/gate_unit.sv`:
  the gate unit.
- `rtl/elementwise_unit.sv`, `rtl/lstm_controller.sv`, `rtl/lstm_top.sv`:
  the rest and the top.
- `tb/`: one self-checking testbench per module (`tb_<module>.sv`), plus:
  - `tb_fp_pkg.sv`: exact fp32 <-> real conversions used as reference;
  - `lstm_top_tb_body.svh`: the shared end-to-end test body;
  - `tb_lstm_top_full.sv`: the end-to-end test at the default size.

## Verification

Every testbench checks against values it computes itself in real arithmetic.
Each prints `TB_RESULT checks=N failures=M` and has a watchdog.

- **FP units**: the multiplier is bit-exact against correctly rounded
  results on 20,000 random operand pairs. The adder is bit-exact on 30,000
  pairs, except for a 1-ulp allowance when exponents differ by more than 28,
  where the double-precision reference itself rounds. Directed cases cover
  zeros, subnormals, overflow and cancellation.
- **Nonlinearities**: checked against the PLAN formula (within 2^-14) and
  the exact functions, over a sweep and random points, plus symmetry.
- **dot_product_unit, accum_mult_array, gate_unit**: random sparse
  weights, random stalls on every stream and a slow consumer. Stall-free
  runs check the cycle counts: first result after NZ/TC + 1 cycles, then one
  step every NZ/TC cycles.
- **elementwise_unit, lstm_controller**: random back-pressure, row order,
  phase order, new-sequence handling.
- **End to end**:
  - `tb_lstm_top` runs R=32, C=64, NZ=8, TR=4, TC=2 for five time steps with
    1..4 refinement steps, random stalls everywhere, and two sequence starts.
    It counts that step overlap, hand-off stalls, output back-pressure, new
    sequences, recurrence and multi-step refinement each happen.
  - `tb_lstm_top_full` runs the default size for three time steps and times
    the gate phase.
  - Both compare every h and c element with the reference, within 1e-3
    relative.

With plain Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_lstm_top \
  rtl/lstm_pkg.sv tb/tb_fp_pkg.sv $(ls rtl/*.sv | grep -v lstm_pkg) tb/tb_lstm_top.sv
./obj_dir/Vtb_lstm_top
```

Replace `tb_lstm_top` with any other testbench name. The full-size build
compiles in about half a minute and simulates in well under a second.

## Limits

- Weights in the tests are random, not a trained model. The tests prove
  that the arithmetic and sequencing are right, not what captioning
  accuracy a given (NZ, n_steps) reaches.
- Timing closure at 100 MHz has not been attempted (see Number format).
- No memory controller, DMA or host interface is included.
