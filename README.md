# Pipelined SPx-quantised MLP accelerator

This is synthesizable SystemVerilog for a small multi-layer-perceptron inference
engine. It follows the design in *"A Deep Learning Inference Scheme Based on
Pipelined Matrix Multiplication Acceleration Design and Non-uniform
Quantization"* (Zhang et al.). That paper builds the engine from three ideas:

1. **A matrix-vector product is split into rows.** `W · d` becomes `m`
   independent dot products `w_i · d`. Each weight row is paired with the data
   vector into a *reorganised row* `[w_i | d]` of `2n` elements. A processing
   unit needs exactly this row and nothing else.
2. **Loading and computing run on different clocks.** Rows are fetched from
   RAM into an input buffer under a loading clock (`clk_inbuff`). The
   processing units read the buffer under an unrelated computing clock
   (`clk_compute`), so computation is never held to the pace of memory
   access.
3. **Weights are non-uniformly quantised (SPx).** Each weight is a signed sum
   of a few powers of two, times a scale α shared by the whole layer.
   Multiplying a data element by a weight is then a few shifts and an add.

The network is the paper's handwritten-digit classifier. It has 784 inputs
(28×28 grey levels), 128 hidden neurons and 10 outputs. Both computed layers
use the sigmoid, and the class is the index of the largest output.

Much of what follows is not in the paper. That includes the number formats,
the buffer organisation, the flow control, the sigmoid circuit, the host
interface and the number of processing units. The section *Where this
departs from the paper* lists each of these choices.

## Dataflow

```
 clk_inbuff domain                        |  clk_compute domain
                                          |
 host ──> param_ram ──> row_loader ──> input_buffer ──> compute_ctrl
          (weights,      (pairs rows      (dual-clock    ├─ pu 0 ─ act_unit ─┐
           biases)        with d, alpha,   FIFO of row   ├─ pu 1 ─ act_unit ─┤
 host ──> input vector    biases)          groups)       └─ pu 2 ─ act_unit ─┤
              ^                                                              │
              │             return buffer (input_buffer, 32 x 56 bit)        │
              └───────── hidden activations <──────────── hidden layer ──────┤
                                          |              output layer ──> argmax_unit
                                          |                                 -> done, cls, scores
```

One inference runs as follows:

1. The host writes the input vector and pulses `start`.
2. `row_loader` streams the hidden layer's 128 weight rows. They go three at
   a time, one group per `clk_inbuff`, into `input_buffer`. Each group carries
   the input vector.
3. `compute_ctrl` pops one group per `clk_compute` and hands row *p* to
   processing unit *p*.
4. 14 clocks later (at N = 784) the three sigmoid outputs are ready. They go
   back across the clock boundary through the *return buffer*, a second
   instance of `input_buffer`.
5. The loader waits until all 128 hidden activations are back.
6. The loader then streams the 10 output-layer rows, paired with the hidden
   activations as data.
7. `argmax_unit` collects the ten outputs and pulses `done` with the class and
   the ten scores.

## SPx weights and the number formats

This is the part that needs the most care when changing widths.

**Weight code** (`WB = 1 + TERMS·TERM_BITS` bits, 7 by default):
`{sign, c[TERMS-1], …, c[0]}`. Term *i* is 0 if `c[i] = 0`, otherwise
`2^-c[i]`. With the default `TERMS = 3` and `TERM_BITS = 2`, every term is
0, 1/2, 1/4 or 1/8. The weight value is

    w = (sign ? -1 : +1) · α · Σ_i term_i

The representable magnitudes before α are the sums of three such terms, from
0 to 1.5. They are densest near the top of the range, which is the point of
SPx over plain power-of-two quantisation: plain power-of-two levels become
sparse towards the ends of the interval. α is stored once per layer, not per
weight.

**Element product** (`spx_mul`): the data element `d` is unsigned Q0.8, so
the value is `d/256`. Define `EMAX = 2^TERM_BITS − 1`. The product keeps
`EMAX` extra fraction bits, so it stays exact:

    prod = ± Σ_{c_i ≠ 0} (d << (EMAX − c_i))   =  d · Σ term_i · 2^EMAX

With the defaults this is 14 bits, signed. No multiplier is used.

**Dot product** (`pu`): the sum of N products is 24 bits at N = 784. α is
not yet applied.

**Neuron output** (`act_unit`): α is unsigned Q4.4 and the bias `b` is signed
Q7.8. The pre-activation, in Q.8 (units of 1/256), is

    z = floor(α · s / 2^(EMAX+4)) + b

The output is `y = sigmoid(z)` as an unsigned byte in Q0.8, saturating at
255/256. The sigmoid is the piecewise-linear PLAN curve. It uses only shifts
and adds, and stays within 0.02 of the true logistic function:

| `|z|`          | f(|z|)              |
|----------------|---------------------|
| ≥ 5            | 1                   |
| 2.375 … 5      | \|z\|/32 + 0.84375  |
| 1 … 2.375      | \|z\|/8 + 0.625     |
| 0 … 1          | \|z\|/4 + 0.5       |

`f` is computed on `|z|` and rounded down to 1/256. For negative `z` the
output is `1 − f`, so the curve is exactly point-symmetric in the integer
domain.

Input pixels are grey levels 0…255, read as Q0.8. The hidden activations
come out in the same Q0.8 format, so both layers see data of the same kind.

## Row groups: the input-buffer entry

There are `P` processing units (default 3). Rows therefore travel in groups
of `P`, and one `param_ram` word is one group. The hidden layer uses
`G1 = ceil(128/3) = 43` groups and the output layer `G2 = ceil(10/3) = 4`.
The last group of a layer may be short: 2 of 3 rows for the hidden layer, 1
of 3 for the output layer.

An input-buffer entry is the packed struct below, defined identically in
`row_loader` and `compute_ctrl`, most significant field first:

| field   | bits           | meaning                                        |
|---------|----------------|------------------------------------------------|
| layer   | 1              | 0 hidden, 1 output                             |
| last    | 1              | last group of the layer                        |
| first   | 16             | index of the row in slot 0                     |
| count   | 16             | real rows in the group, 1…P                    |
| alpha   | 8              | the layer's α                                  |
| bias    | P × 16         | one bias per row                               |
| d       | N_IN × 8       | the data vector, shared by the P rows          |
| w       | P × N_IN × WB  | P weight rows                                  |

At the defaults an entry is 22,830 bits wide. The data vector is stored once
per entry and fanned out to all P units. Each unit therefore still sees the
reorganised row `[w_i | d]` the paper describes, without storing P copies of
`d`. For the output layer, elements beyond 128 of `d` are sent as zero.

A return-buffer entry is `{first, count, y[P]}`, 56 bits.

## The two clock domains and flow control

`input_buffer` is a dual-clock FIFO:

- Read and write pointers are one bit wider than the address.
- Each domain sees the other's pointer in Gray code, through a two-flop
  synchroniser.
- The read side is show-ahead: the oldest entry is on `rdata` whenever
  `empty` is low.
- The write side also reports `wr_count`. This is its view of the fill
  level. It can overstate the fill by the synchroniser delay, never
  understate it.

Each domain has its own reset synchroniser (`reset_sync`): reset asserts
asynchronously and releases on the second clock edge.

Three mechanisms keep the data moving without loss:

- **Loader back-pressure.** `param_ram` has a one-clock read. The loader
  starts a read only when `wr_count` plus the write already in flight leaves
  room. It therefore never writes a full buffer, yet still writes one entry
  per clock while the reader keeps up.
- **Compute starvation.** When the buffer is empty, `compute_ctrl` simply
  feeds nothing that clock. The pipeline has no stall: what is already inside
  keeps moving.
- **Return credit.** A hidden-layer group is popped only if the return
  buffer's fill count plus the hidden groups still inside the pipeline is
  below `RET_DEPTH`. Every result therefore has a place when it comes out.
  At `RET_DEPTH = 32` the credit never throttles a full-speed layer at the
  default sizes. With 8 it would, because the pipeline alone holds 14
  groups.

The paper's premise is that loading is at least as fast as computing. Here
that means one entry per `clk_inbuff` against one per `clk_compute`. With a
`param_ram` word as wide as an entry, that holds whenever `clk_inbuff` is not
slower than `clk_compute`. If it is slower, the units starve, and the result
is still correct.

## Timing

| path                                              | clocks                               |
|---------------------------------------------------|--------------------------------------|
| `spx_mul`                                         | combinational                        |
| `pu`, row in → sum out                            | `2 + ceil(log2 N)` (12 at N = 784)   |
| `compute_ctrl`, pop → return write / `out_valid`  | `pu` latency + 2 (14)                |
| `argmax_unit`, last group → `done`                | 1                                    |
| `input_buffer`, write → visible to reader         | 2–3 reader clocks                    |
| full inference, `start` → `done`                  | 82 `clk_compute` clocks              |

The last row was measured with `clk_inbuff` 2.5× faster than `clk_compute`.
Of the 82 clocks, 43 are the hidden-layer groups at one per clock and 4 are
the output-layer groups. The rest is pipeline depth, plus two trips across
the clock boundary.

The paper reports 1.6 µs per sample on its FPGA. At 82 clocks per sample,
that figure would be matched with `clk_compute` ≈ 51 MHz. The paper states no
clock frequency, so this is only a sanity check.

## Host interface

All host writes are made in the `clk_inbuff` domain, one per clock, through
the `host` port (`mlp_pkg::host_wr_t`):

| `sel`         | uses                        | writes                                         |
|---------------|-----------------------------|------------------------------------------------|
| `HOST_WEIGHT` | layer, row, col, wdata[6:0] | SPx code of `W[layer][row][col]`               |
| `HOST_BIAS`   | layer, row, wdata           | bias of a neuron, signed Q7.8                  |
| `HOST_ALPHA`  | layer, wdata[7:0]           | α of a layer, Q4.4                             |
| `HOST_PIXEL`  | col, wdata[7:0]             | input element, Q0.8                            |

`layer = 0` is the 784→128 layer and `layer = 1` the 128→10 layer. The
output layer's rows use columns 0…127.

After loading, pulse `start` for one `clk_inbuff` clock. `busy` stays high
while the loader works. In the `clk_compute` domain, `done` pulses for one
clock with `cls` and `scores`, the ten sigmoid outputs in Q0.8.

Rules for the host:

- Do not write while `busy` is high.
- Weights and biases persist across samples, so only the pixels need
  rewriting between samples.

## Parameters of `mlp_accel`

| parameter   | default | meaning                                          | source         |
|-------------|---------|--------------------------------------------------|----------------|
| `N_IN`      | 784     | inputs                                           | paper          |
| `N_HID`     | 128     | hidden neurons                                   | paper          |
| `N_OUT`     | 10      | outputs / classes                                | paper          |
| `P`         | 3       | processing units                                 | drawn in the paper's dataflow figure; not stated |
| `TERMS`     | 3       | power-of-two terms per weight (the x of SPx)     | own choice     |
| `TERM_BITS` | 2       | code bits per term                               | own choice     |
| `BUF_DEPTH` | 4       | input-buffer entries (power of two)              | own choice     |
| `RET_DEPTH` | 32      | return-buffer entries (power of two)             | own choice     |

Data width (8), bias width (16) and α width (8) are fixed local parameters.

## Where this departs from the paper, or fills gaps

- **Numbers.** The paper speaks of "quantized float" arithmetic but gives no
  format. Everything here is fixed point. Data is Q0.8, products are exact,
  and the bias is Q7.8.
- **SPx encoding.** The paper's formulas disagree on the sign:
  - SP2 uses `b1 + b2 = b − 1` bits, with one bit left over for the sign.
  - SPx uses `b = Σ b_i` bits, and prints ± inside each term.

  This design uses one sign for the whole weight and the same width for
  every term. It maps code `c` to `2^-c`. The paper's equation for a
  power-of-two multiply prints the shift directions reversed; the RTL shifts
  in the arithmetically correct direction.
- **Processing-unit insides.** The paper's figure shows operand
  boxes → multiply → `t[k]` → add for two lanes. This is generalised to N
  lanes, with a register after every adder-tree level.
- **Number of processing units.** The text gives none; the dataflow figure
  draws three.
- **Input buffer.** The paper says only that it is made of registers and
  crosses from `clk_inbuff` to an asynchronous `clk_compute`. The FIFO
  organisation, Gray-code crossing, depth and credit scheme are this
  design's own.
- **Layer sequencing and the return path.** The paper does not say how a
  layer's outputs become the next layer's data. Here they go back through a
  second dual-clock buffer into the loader.
- **Sigmoid.** The paper names the logistic function. The PLAN
  approximation is this design's choice.
- **α and bias.** These appear only in the paper's equations. Here α is per
  layer and applied once per dot product, and biases are stored next to the
  weights.
- **Not covered.** The paper also runs a Q-learning network (Acrobot) on
  the accelerator, without giving its size. Layer sizes here are
  elaboration parameters, so such a network needs its own instance. Training
  and the power measurements are outside the hardware.

## Size and synthesis

At the defaults the design holds:

- about 774 kbit of weight memory (`param_ram`);
- an input buffer of 4 × 22,830 bits;
- three 784-lane processing units, which take roughly 100 k flip-flops and
  about 2,352 shift-add element multipliers, followed by 783 adders each.

Verilator and the slang front end of yosys elaborate the full-size design in
seconds. A full yosys synthesis pass at this size runs for a long time; no
gate counts are quoted here.

## Files

`rtl/`

| file              | content                                                      |
|-------------------|--------------------------------------------------------------|
| `mlp_pkg.sv`      | host write struct and target enum                            |
| `mlp_accel.sv`    | top level                                                    |
| `param_ram.sv`    | weight/bias memory, row-group words                          |
| `row_loader.sv`   | loading-domain controller                                    |
| `input_buffer.sv` | dual-clock FIFO (input buffer and return buffer)             |
| `compute_ctrl.sv` | computing-domain controller, P units, sideband pipeline      |
| `pu.sv`           | processing unit: pipelined dot product                       |
| `spx_mul.sv`      | SPx shift-add multiply                                       |
| `act_unit.sv`     | α, bias, PLAN sigmoid                                        |
| `argmax_unit.sv`  | classification                                               |
| `reset_sync.sv`   | reset synchroniser                                           |

`tb/`: each block has a self-checking testbench, `tb_<module>.sv`.
`mlp_ref_pkg.sv` is a floating-point reference model of the arithmetic,
written from the formats above rather than from the RTL. The whole-design
testbenches are:

- `tb_mlp_accel`: reduced sizes (20-16-10), six samples under two clock
  ratios. It counts every flow-control mechanism (full buffer, empty buffer,
  credit hold, short groups, waiting for the hidden layer) and fails if one
  never happens.
- `tb_mlp_accel_full`: one complete inference at the default sizes. It
  checks the class, all ten scores and the one-group-per-clock rate, and
  prints the cycle count.

Each testbench prints `TB_RESULT checks=N failures=M`.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/mlp_pkg.sv tb/mlp_ref_pkg.sv tb/tb_mlp_accel.sv \
    --top-module tb_mlp_accel -o sim
./obj_dir/sim
```

Replace `tb_mlp_accel` with any other testbench name. The full-size
testbench takes about a minute to build and a few seconds to run. The
testbenches assume a two-state simulator, and initialise or reset everything
they read.
