# X-TPU: a systolic matrix unit with per-neuron voltage overscaling

Neural-network inference tolerates small arithmetic errors. Some neurons matter
much less to the final answer than others. The X-TPU turns both facts into
energy savings. It is a weight-stationary systolic array, like a TPU's matrix
unit. In each processing element (PE), the multiplier sits in its own supply
region. That region can run at the nominal supply or at a lower, "overscaled"
supply. The clock stays the same, so a lowered multiplier saves power but may
make timing errors.

Each array column computes one neuron, so the supply is chosen per column.
The choice is not held in a configuration register. It travels with the weights:
every weight word in the weight memory carries a few voltage-selection bits in
its most significant bits. When the array loads a neuron's weights, that
column's voltage switch box also connects the column's multipliers to the
supply those bits name. A new quality/energy trade-off is then just a
different set of weight words. An offline step picks the level of each neuron
from an error model of the PE and the neuron's sensitivity to error.

Only the multiplier is overscaled. The adder and the partial-sum registers stay
at the nominal supply, so a timing error in one PE is a single additive error
on that PE's product. It is not corrupted further as it moves down the column.
The error of a column is then close to a sum of independent per-PE errors. This
is what makes the per-neuron assignment predictable.

This repository holds synthesizable SystemVerilog for the digital part of that
design. It also has self-checking testbenches for every block and for the
whole unit.

## Block diagram

```
                 host writes                          host writes
                     |                                     |
                     v                                     v
  +---------+   +-----------------------------+      +-----------+
  | control |-->| weight memory               |      | unified   |
  |  unit   |   | row = N words of            |      | buffer    |
  |         |   | [vsel(2) | weight(8)]       |      | row = one |
  |         |   +-----------------------------+      | vector of |
  |         |     | weight(8) per column | vsel(2)    | N x 8 bit |
  |         |     v                      v            +-----------+
  |         |   +----------------+  +-------------+         |
  |         |-->| N x N PE array |  | voltage     |         |
  |         |   | (xtpu_mxu)     |<-+-switch box  |         |
  |         |   |  act -> right  |  | x N columns |--> col_sw_en[N]
  |         |   |  psum -> down  |  +-------------+    (to power switches)
  |         |   +----------------+<-----------------------+
  |         |           | N column results (24 bit)   skewed activations
  |         |           v
  |         |-->+-----------------------------+
  +---------+   | accumulator: per column     |---> host reads (N x 32 bit)
                | adder + 256 x 32-bit store  |
                +-----------------------------+
```

| module | role |
|---|---|
| `xtpu_pkg` | widths, types (`wword_t`, `vlevel_e`), level-to-millivolt table |
| `xtpu_mult` | PE multiplier, 8 x 8 -> 16 bit, signed; the overscaled region |
| `xtpu_pe` | one PE: prefetch and stationary weight registers, activation register, multiplier, 24-bit adder, partial-sum register |
| `xtpu_mxu` | N x N array of PEs with the input skew registers |
| `xtpu_vsb` | per-column voltage switch box (selection register and one-hot switch enables) |
| `xtpu_weight_mem` | weight memory, 10-bit words |
| `xtpu_unified_buffer` | activation vectors |
| `xtpu_accumulator` | per-column partial-sum storage with overwrite / add |
| `xtpu_control` | command sequencer |
| `xtpu_top` | everything above, wired together |

## The weight word and how a column gets its supply

A weight-memory word is 10 bits (`xtpu_pkg::wword_t`):

```
 9   8   7                               0
+-------+---------------------------------+
| vsel  |   weight (signed, -128..127)    |
+-------+---------------------------------+
```

There are four levels, so two selection bits are needed. In general,
log2(levels) bits are needed. The code assignment is this design's own:

| code | `vlevel_e` | supply | meaning |
|---|---|---|---|
| 0 | `VDD_EX` | 0.8 V | nominal, exact |
| 1 | `VDD_APX_3` | 0.7 V | overscaled |
| 2 | `VDD_APX_2` | 0.6 V | overscaled |
| 3 | `VDD_APX_1` | 0.5 V | lowest |

Code 0 is "exact", so a cleared word or a reset column runs safely.

All words of one column of a weight tile should carry the same code, since
the column is one neuron. The memory stores what it is given. The switch box
takes the code of the last word shifted into its column, which is the word of
array row 0. Selection follows the same double buffering as the weights:

1. While a tile is prefetched, each word's weight shifts down its column's
   prefetch chain (`w_shift`). Its code is captured into the box's shadow
   register at the same time (`vsel_load`).
2. A single `w_commit` pulse copies every prefetch weight into the
   stationary weight register of its PE. The same pulse copies every shadow
   code into the box's active register.
3. The box drives `sw_en`, a one-hot enable with bit k for code k. These
   enables come out of the top as `col_sw_en[c]`, to drive the column's power
   switches. An assertion checks the one-hot property.

Weights and supply therefore change together, and only between weight sets.
The unit refuses (by assertion) a commit while an activation is still moving
through the array.

## Inside a PE

```
 w_in(8) --> [prefetch w] --+--> w_out(8)          psum_in(24)
                            |                          |
                      w_commit                          |
                            v                          v
                     [stationary w]--+            +---------+
 act_in(8) --> [act] ----------------+--> (x) --> |   +     |--> [psum] --> psum_out(24)
                 |                   16 bit      +---------+
                 +--> act_out(8)     (level shifter here in silicon)
```

`psum_out <= psum_in + act_q * w_stat` is computed every cycle. The product is
sign-extended from 16 to 24 bits. The multiplier is a separate module
(`xtpu_mult`) so that a power-intent description can place that instance, and
nothing else, in the column's switched supply domain. In silicon a level
shifter sits on the 16 product bits between the two supply regions. Logically
it is a wire, and it appears in the RTL as the net `prod`.

## Dataflow and timing

Activations move right one PE per clock. Partial sums move down one PE per
clock, starting from zero at the top. Column c therefore produces
`O_c = sum_i W[i][c] * A[i]`. Here row i of the array holds input i and
column c holds neuron c. `xtpu_mxu` takes a whole N-element vector in one
cycle. A triangular register bank delays element i by i cycles, so a new
vector can enter every cycle.

Latencies, checked by the testbenches (N = 16):

| event | cycles |
|---|---|
| vector sampled at edge t -> column c result valid | after edge t + N + c |
| first column result | N (16) |
| last column result | 2N - 1 (31) |
| weight prefetch of one tile | N (16) shifts, plus 1 to commit |
| command with weight load, M vectors, start to `done` | 3N + 4 + M (52 + M) |
| command reusing the loaded weights | 2N + 3 + M (35 + M) |

Weight loading does not overlap with streaming in this control unit, although
the prefetch registers would allow it.

## Running a layer

The host writes the weight memory one row (N words) per cycle and the unified
buffer one vector per cycle. It then issues commands on the `start` port:

| field | meaning |
|---|---|
| `load_w` | 1: prefetch weight rows `wm_base .. wm_base+N-1`, with row `wm_base` landing in array row 0, then commit. 0: keep the current weights and supplies. |
| `ub_base`, `num_vec` | stream vectors `ub_base .. ub_base+num_vec-1` |
| `acc_base`, `accumulate` | results of vector k go to accumulator entry `acc_base+k` of every column. The entry is overwritten (`accumulate`=0) or added to (`accumulate`=1). |

`busy` is high from the command until `done`, a one-cycle pulse after the last
column's last result has been written. `acc_re`/`acc_raddr` read one entry of
all columns, with one cycle of latency.

To run a layer with K inputs and J neurons, split it into ceil(K/N) row tiles
and ceil(J/N) column tiles. For each column tile, run its row tiles in turn:
the first with `accumulate=0`, the rest with `accumulate=1`. Then read the
accumulator. The hardware has no activation function or requantisation. The
host does both between layers and writes the 8-bit results back into the
unified buffer. `tb/tb_xtpu_mnist_fc.sv` does exactly this for a 784-128-10
network, and `tb/tb_xtpu_lenet5.sv` for LeNet-5. There the host also unrolls
the 5 x 5 input patches of each convolution into vectors and does the max pooling.

## Sizes

| parameter | default | origin |
|---|---|---|
| array size `N` | 16 | the 16 x 16 matrix-multiplication configuration the design was verified with |
| activation / weight / product / partial sum | 8 / 8 / 16 / 24 bit | the PE drawing |
| voltage levels | 4 (0.8, 0.7, 0.6, 0.5 V) | design |
| selection bits | 2 | log2(levels) |
| weight memory | 8192 rows x 16 words x 10 bit | own choice: holds the whole 784-128-10 network (6400 rows) |
| unified buffer | 1024 vectors x 16 x 8 bit | own choice |
| accumulator | 256 entries x 16 columns x 32 bit | own choice |

All are parameters of `xtpu_top` (`N`, `WM_DEPTH`, `UB_DEPTH`, `ACC_DEPTH`).
The widths and the number of levels live in `xtpu_pkg`.

Which workloads fit at these sizes:

- The 16 x 16 matrix product fits as one command.
- The 784-128-10 MNIST network fits entirely in the weight memory (400 tiles).
  The unified buffer holds 17 images at a time.
- LeNet-5 has about 61 k weights, which is 4256 rows, so it fits. Its
  convolutions need the host to unroll input patches into vectors. The
  accumulator holds 256 results per column, so the 784 output pixels of the
  first convolution run in four chunks. One image takes 272 commands.
- ResNet-50 has about 23.5 M weights and does not fit. The weight memory would
  have to be refilled about 180 times per inference. `tb/tb_xtpu_resnet_block.sv` runs
  the part that can be simulated: the first bottleneck block of stage 2 on a
  32 x 32 x 64 map (1x1, 3x3 and 1x1 convolutions plus the projection
  shortcut), refilling the weight memory for each layer. That is 13,776 commands.

## What the RTL does not model

- **Timing errors.** The logic computes exact products at every level. The
  errors of an overscaled multiplier depend on the cell library, the layout
  and the operands. They show up only in gate-level simulation with
  per-voltage delay annotation, or by injecting a statistical error model
  into a software model of the network. The reference characterisation of
  one PE found roughly Gaussian, zero-mean errors with these variances
  (squared product units):

  | PEs in a column | 0.5 V | 0.6 V | 0.7 V |
  |---|---|---|---|
  | 1 | 3.0e6 | 1.4e5 | 2.0e5 |
  | 16 | 6.0e7 | 1.9e7 | 2.9e6 |
  | 256 | 8.9e8 | 2.9e8 | 4.9e7 |

  The variance grows about linearly with column length, as expected for
  independent per-PE errors.
- **Supply rails, power switches and level shifters.** These are circuits. The
  top exposes `col_sw_en` (one-hot per column) and `col_vsel` to drive them.
- **Choosing the levels.** The per-neuron level comes from an offline
  optimisation. It estimates each neuron's error sensitivity, then uses an
  integer linear program to minimise the sum of the chosen supplies, subject to
  a bound on the added output mean-squared error. The hardware only consumes
  the result, as the selection bits of the weight words.

## Choices made here

The following points are not fixed by the architecture description. They were
chosen for this implementation:

- Signed activations. Signed weights follow from their -128..127 range.
- The level code order (0 = exact).
- Double-buffered selection in the switch box, committed together with the
  weights.
- The input skew inside the array module.
- A valid bit that travels with the activations.
- Synchronous active-low reset of all control and datapath registers.
  Memories are not reset.
- One-cycle synchronous reads on all memories. A read and a write of the same
  row in one cycle return the old data.
- The memory depths, and a 32-bit accumulator entry.
- The command interface and the state sequence of the control unit
  (LOAD, LWAIT, SETUP, STREAM, DRAIN, DONE), with no overlap of weight loading
  and streaming.
- No activation-function hardware.

## Simulating

Every testbench in `tb/` checks itself. It prints
`TB_RESULT checks=<n> failures=<n>` and stops. Each has a watchdog. With
Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/xtpu_pkg.sv tb/tb_xtpu_top.sv --top-module tb_xtpu_top -o sim
./obj_dir/sim
```

Replace `tb_xtpu_top` with any testbench name:

| testbench | what it checks |
|---|---|
| `tb_xtpu_mult` | all 65,536 operand pairs |
| `tb_xtpu_pe` | 4000 random cycles against a register-level model |
| `tb_xtpu_mxu` | 16 x 16 array: results and per-column arrival cycles; a prefetched tile does not disturb the active one before its commit |
| `tb_xtpu_vsb` | reset level, shadow/active behaviour, one-hot enables, all four levels |
| `tb_xtpu_weight_mem`, `tb_xtpu_unified_buffer` | random write/read, read latency |
| `tb_xtpu_accumulator` | overwrite, accumulate and second region, with column-staggered input |
| `tb_xtpu_control` | addresses, pulse order, start-to-done cycles |
| `tb_xtpu_top` | full design at default size: a 32-input, 16-neuron layer over two row tiles with accumulation, a supply change with unchanged weights, weight reuse, cycle counts, and a count of every mechanism |
| `tb_xtpu_mm16` | the 16 x 16 matrix product at three supply assignments |
| `tb_xtpu_mnist_fc` | a 784-128-10 network (random weights) for two images, with per-neuron levels; the output layer after linear and after sigmoid activations |
| `tb_xtpu_lenet5` | one LeNet-5 inference (random weights): two convolutions as unrolled patches, three FC layers, every layer's results and column levels |
| `tb_xtpu_resnet_block` | one ResNet-50 bottleneck block (random weights) on a 32 x 32 x 64 map: every result of the four convolutions and the column levels |

All of them run in seconds; `tb_xtpu_resnet_block`, the longest, needs about 1.2 million cycles. Testbenches use only `$urandom` for stimulus.
