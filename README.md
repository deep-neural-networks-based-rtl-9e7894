# Computation-reuse inference datapath for polynomial-approximated weights

This is synthesizable SystemVerilog for the inference hardware described in
"Deep Neural Networks Based Weight Approximation and Computation Reuse for 2-D
Image Classification" (Tolba et al.). The RTL was written from that
description. Where the description is silent, the choices made here are
marked as such below and in the comment at the top of each file.

## The idea

During training, every group of `N_w` neighbouring weights is replaced by a
least-squares polynomial through them. A group can be one row of a
convolution filter, or a run of consecutive weights of a fully connected
neuron. Only the polynomial's coefficients are kept:

    w(x) = c0 + c1*x            (linear)       x = 0 .. N_w-1
    w(x) = c0 + c1*x + c2*x^2   (quadratic)

This shrinks the stored model: the LeNet-5 configuration built here needs
1.42 KB of 8-bit coefficients. It also changes the arithmetic. A dot product
over one group factors into data-only sums and the coefficients:

    sum_x w(x)*y_x = c0 * (sum_x y_x) + c1 * (sum_x x*y_x)
                   = c0 * d0          + c1 * d1

For a 3-wide filter row this is `d0 = y0+y1+y2` and `d1 = y1 + 2*y2`.
`d0` and `d1` depend only on the input data, not on the filter. In a
convolution many filter rows pass over the same ifmap row, and in a fully
connected layer many neurons read the same inputs. So each `d` is computed
once (*computation reuse*) and fed to every processing element (PE) that needs
it. A PE is reduced to two multipliers and an adder (`c0*d0 + c1*d1`), plus
the adder that chains partial sums.

## Blocks

| file | role |
|------|------|
| `rtl/dnn_pkg.sv` | shared widths (8-bit data and coefficients, 32-bit sums) and the width function for `d` |
| `rtl/reuse_unit.sv` | forms `d_k = sum_i (X0+i)^k * y_i` for one data row or sub-block |
| `rtl/reuse_pe.sv` | PE: `psum_out = psum_in + sum_k c_k*d_k` |
| `rtl/conv_pe_array.sv` | K x (H-K+1) convolution PE array with diagonal data reuse |
| `rtl/conv_engine.sv` | convolution engine: stationary filter, column-shifting ifmap window, reuse units, PE array |
| `rtl/fc_engine.sv` | fully connected engine: sub-block reuse units, sub-block x neuron PE array, group accumulator |
| `rtl/coef_mem.sv` | coefficient store (register array, synchronous read) |
| `rtl/classifier.sv` | arg-max over the output layer |
| `rtl/dnn_reuse_top.sv` | top: both engines, their coefficient stores and the classifier |

## The convolution array

This is the part that takes the most care to follow. Take an `H x W` ifmap and
a `K x K` filter. Row `i` of the filter is stored as `c[i][0..ORDER]`. The
output map has `H-K+1` rows. The engine computes one complete output column
per clock.

**Window.** Each ifmap row has a K-deep shift register. Each accepted ifmap
column shifts every row one place. After column `c` has been accepted,
`win[r][x]` holds ifmap element `(r, c-K+1+x)`, so `x` is exactly the
polynomial's abscissa for that filter row. Each ifmap element is loaded once
and used in K successive windows.

**Reuse units.** There is one per ifmap row, so `H` in all. Each turns its
row's K-wide window into `d0..d_ORDER`.

**PE array.** The array has `K` rows, one per filter row, and `H-K+1` columns,
one per output row. PE `(i, j)` combines filter row `i` with ifmap row `i+j`:

    column j (output row j):   PE(0,j) = c[0] . d[j]
                               PE(1,j) = c[1] . d[j+1]
                               ...
                               PE(K-1,j) = c[K-1] . d[j+K-1]
    col_sum[j] = sum of the column = output element (j, c-K+1)

So:
- filter row `i` is used by the whole array row `i`;
- the `d` values of ifmap row `r` are used by every PE on the diagonal
  `i + j = r`;
- partial sums are chained down each column.

For a 3x3 filter on a 5-row ifmap, this mapping gives the 3x3 array
PE1..PE9 of the paper's example:

| | column 0 | column 1 | column 2 |
|---|---|---|---|
| filter row 1 | ifmap row 1 | ifmap row 2 | ifmap row 3 |
| filter row 2 | ifmap row 2 | ifmap row 3 | ifmap row 4 |
| filter row 3 | ifmap row 3 | ifmap row 4 | ifmap row 5 |

At the default size (28x28 ifmap, 5x5 filter), the array has 5 x 24 = 120 PEs
fed by 28 reuse units. In the paper's count of adders and multipliers,
`N1*N2 + 3*N3`, that is 28*8 + 3*120 = 584, against 1080 for a row-stationary
array of the same size. The 584 does not include the one adder per PE that
chains the partial sums.

**Timing.**

- Ifmap column `c` is presented with `col_valid`. Column 0 of each ifmap is
  also marked with `col_first`.
- From the K-th column on, each accepted column produces output column
  `c-K+1`. It appears on `out_col` one clock after the accepting edge, with
  `out_valid` and `out_idx`.
- Idle clocks between columns are allowed. There is no back-pressure.
- Filter coefficients are loaded with a one-clock `coef_load` and stay until
  the next load.

The engine handles one filter on one input channel. Stride is 1 and there is
no padding. When a layer has several input channels, the per-channel outputs
must be added outside the engine (LeNet-5's second layer has six).

## The fully connected array

Each neuron's `N_IN` weights are cut into `N_IN/NW` groups of `NW`
consecutive weights. Each group has its own coefficients. The engine takes one
group of inputs per clock.

**Sub-blocks.** A group is split into `NW/SUB` sub-blocks R1, R2, .... Each
sub-block is a reuse unit over `SUB` inputs. Its `x` does not restart at 0: it
carries on across the group. Sub-block `s` uses offset `X0 = s*SUB`. For a
9-weight group split into threes:

    R1: d0 = y0+y1+y2   d1 =   y1 + 2y2
    R2: d0 = y3+y4+y5   d1 = 3y3 + 4y4 + 5y5
    R3: d0 = y6+y7+y8   d1 = 6y6 + 7y7 + 8y8

**PE array.** The array has `NW/SUB` rows (sub-blocks) and `N_OUT` columns
(neurons). Neuron `n`'s coefficients for the current group are used down
column `n`. Sub-block `s`'s `d` values are used along row `s`. A column's sum
is neuron `n`'s dot product with the current group.

**Accumulation.** A per-neuron accumulator adds the column sums over the
`N_IN/NW` groups.

**Timing.**

- Groups are presented in order, 0 first.
- `grp_idx` shows the group the engine expects next.
- The edge that accepts the last group loads `out_f`, and `out_valid` is high
  for the following clock.
- A new vector may follow at once.

Defaults are 192 inputs, 10 outputs and groups of 6 in two sub-blocks of 3.
This is the output layer of the LeNet-5 MNIST configuration with the highest
parameter reduction (1211.3x).

## Coefficient stores and the top level

`dnn_reuse_top` holds two `coef_mem` instances. Each word carries everything
one engine needs for one step, so an engine never waits on more than one read:

- **Convolution store:** `N_FILT` = 78 words, one per filter. These are the
  6 + 6*12 filters of LeNet-5. Field `(r*(ORDER+1) + k)`, 8 bits wide, is
  coefficient `k` of filter row `r`. 78 x 80 bits = 780 bytes.
- **FC store:** `FC_IN/FC_NW` = 32 words, one per weight group. Field
  `(n*(ORDER+1) + k)` is coefficient `k` of neuron `n` for that group.
  32 x 160 bits = 640 bytes.

The two stores total 1420 bytes, the storage figure reported for this network
configuration.

Top-level timing:

- `filt_load` + `filt_idx` reads one filter from the store. Its coefficients
  enter the convolution engine at the second rising edge after `filt_load`.
  Columns presented after that edge use the new filter.
- `fc_valid` + `fc_y` present one input group. The top delays each group by
  one clock, so that it meets its coefficient word from the synchronous store.
  While the engine takes group `g`, the store is already reading `g+1`, so
  groups can arrive back to back.
- `fc_out_valid` comes two clocks after the last group is presented.
  `class_valid` / `class_idx` come one clock after that.
- The two engines are independent and may run at the same time.

Activation (sigmoid/ReLU), 2x2 average pooling and softmax are not part of
this datapath. The paper's hardware covers only the multiply-accumulate part,
and it gives no number format or circuit for these steps. The convolution
output stream and the FC input stream are therefore ports, where that logic
would connect. The classifier takes the arg-max of the raw FC sums. Sigmoid
and softmax are monotonic, so the resulting class is the same.

## Numbers and widths

- **Coefficients:** 8-bit signed. This follows the 8-bit fixed-point weights
  of the paper's experiments.
  `COEF_W` is a parameter of every block that holds coefficients. Setting
  `COEF_W = 6` gives the 6-bit coefficients that the paper suggests as a
  further memory saving.
- **Activations:** 8-bit signed (own choice).
- **`d` values:** sized by `dnn_pkg::d_width` so they can never overflow. For
  a 5-wide linear row this is 12 bits.
- **Partial sums and accumulators:** 32 bits. This does not overflow for the
  default sizes at 8-bit data.
- **Fixed-point scaling:** there is none. Sums are exact integers, and any
  scaling or rounding between layers belongs with the activation logic.
- **Reset:** `rst_n` is asynchronous and active low. It clears pipeline state
  and registers. The coefficient stores are not reset.

## What is this design's own, and where it departs from the paper

Taken from the paper:
- the factorisation and the reuse-unit formulas, linear and quadratic;
- the PE (two multipliers and one adder for the linear case);
- the convolution array shape and diagonal mapping;
- the shift of the ifmap window by one column per output column;
- the FC sub-block split with `x` running across the group;
- the FC reuse directions (weights down a column, sub-computations along a
  row);
- the layer sizes of the default configuration.

Chosen here, because the description does not say:
- all handshakes and latencies, and the single register stage in each engine;
- the widths other than the 8-bit coefficients;
- the reset;
- the coefficient-store organisation, and a plain register array standing in
  for whatever memory a chip would use;
- processing FC groups one per clock with an accumulator (the example in the
  paper has a single group per neuron);
- the arg-max classifier;
- building the convolution and FC engines side by side, rather than in a
  specified chain.

Known departures and limits:
- **Extra adder per PE.** Each PE has a second adder for the vertical
  partial-sum chain. The paper's hardware count of "one adder + two
  multipliers" per PE does not include it.
- **Quadratic case.** The quadratic case is available as `ORDER = 2` and gives
  3-multiplier PEs. The fit is per filter row, so the variant with one
  quadratic over a whole 25-weight filter is not supported. The default is
  linear.
- **Constant-weight sums.** The reuse units are written as constant-weighted
  sums (`x*y`, `x^2*y`), and synthesis maps them to shift-adds. The paper
  counts 3 adders per 3-wide row and 8 per 5-wide row. A plain shift-add
  mapping of the constants gives exactly those counts (for 5 wide: 4 adders for
  `d0`, 1 for `3*y3`, 3 to sum `d1`), but the RTL does not force that netlist.
- **Sizes that do not fit the defaults.** The convolution engine fits each
  ifmap of up to `H` rows without padding. The CIFAR-10 network (32x32 with
  'same' padding, 10,272 filters) and the 784-input FC networks do not fit the
  defaults, and need other parameter values. `tb_cifar10_workload` builds the
  top with `H = 36` and an FC engine of 2048 to 128 in groups of 8, and runs
  part of the CIFAR-10 network's first layers through it. `tb_fc6432_workload`
  does the same for each layer of the 784-input networks, one FC engine per
  layer shape.
- **Training is not hardware.** Fitting the polynomials is done in software
  during training. The testbenches use random coefficients instead.

## Simulating

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. The references are
computed independently of the RTL's factorisation: every weight is expanded as
`w = c0 + c1*x (+ c2*x^2)` and a plain dot product or convolution is taken.

| testbench | covers |
|-----------|--------|
| `tb_reuse_unit` | 5-wide linear, offset-3 (R2) linear and 5-wide quadratic units, extremes included |
| `tb_reuse_pe` | linear and quadratic PEs |
| `tb_conv_pe_array` | default 5x24 array, random, plus a one-row-at-a-time test of the diagonal mapping |
| `tb_conv_engine` | default engine (28 rows, 5x5), a quadratic 10-row engine and 3x3-filter engines on 10 and 5 rows, several frames, column gaps, output timing (uses `conv_engine_check`) |
| `tb_fc_engine` | default 192->10 in groups of 6, the 9-weight/3-neuron example, a quadratic engine, back-to-back and gapped vectors (uses `fc_engine_check`) |
| `tb_coef_mem` | read latency, read-during-write |
| `tb_classifier` | random scores, planted maxima, ties |
| `tb_fc6432_workload` | every layer shape of the fully connected 784-64-32-10 MNIST network for the seven approximation cases (groups of 4 to 32, linear and quadratic, and plain weights as groups of one with `ORDER = 0`), one FC engine per shape |
| `tb_cifar10_workload` | CIFAR-10 layer shapes: top with `H = 36`, 96 filters and FC 2048 to 128 in groups of 8; two first-layer output maps (three zero-padded channel passes each) and one first-FC-layer vector checked |
| `tb_lenet5_workload` | complete LeNet-5 MNIST inferences (conv1, conv2 summed over channels, FC, class) through the top, for FC groups of 6, 32, 64, 96 and 192 weights; the harness `lenet5_check` supplies activation (a ReLU-and-shift stand-in) and 2x2 average pooling |
| `tb_dnn_reuse_top` | the whole top at default size: store loading, four filter switches, four 28x28 ifmaps, five FC vectors, classification, both engines running at once. Each mechanism is counted and must occur. |

With plain Verilator (5.x), for example:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/dnn_pkg.sv tb/tb_dnn_reuse_top.sv --top-module tb_dnn_reuse_top
    ./obj_dir/Vtb_dnn_reuse_top

Every testbench runs in well under a second of CPU time. `tb_lenet5_workload` and `tb_fc6432_workload` are the exceptions: they take about one and three minutes to build, because they hold five copies of the top and thirteen FC engines.

## Changing the configuration

All sizes are parameters of `dnn_reuse_top`:

| parameter | default | meaning |
|-----------|---------|---------|
| `H` | 28 | ifmap rows |
| `K` | 5 | filter size |
| `ORDER` | 1 | 1 = linear fit, 2 = quadratic fit |
| `N_FILT` | 78 | number of stored filters |
| `FC_IN` | 192 | FC inputs |
| `FC_OUT` | 10 | FC outputs |
| `FC_NW` | 6 | weights per group |
| `FC_SUB` | 3 | inputs per reuse sub-block |
| `COEF_W` | 8 | coefficient width |
| `DATA_W` | 8 | activation width |
| `ACC_W` | 32 | partial-sum width |

Constraints:
- `FC_NW` must be a multiple of `FC_SUB`.
- `FC_IN` must be a multiple of `FC_NW`. `fc_engine` stops elaboration
  otherwise.

For example, `H=10, K=3` gives the 3x8 array of the paper's small example, and
`FC_NW=96` gives its LeNet-5 case 4.
