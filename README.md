# E-ReCON: a 16 Kb ReRAM digital compute-in-memory macro in SystemVerilog

E-ReCON computes neural-network dot products inside a ReRAM array without any ADC or DAC.
Every memory cell is a small AND gate: it multiplies its stored weight bit by a 1-bit input.
A digital adder tree per bank adds up the products. Multi-bit inputs are fed one bit per cycle,
most significant bit first, and a shift-add accumulator rebuilds the full product. So an N-bit
input costs N cycles, and the result is exact: no analog summation, no conversion error.

This RTL implements the macro described in "E-ReCON: An Energy- and Resource-Efficient
Precision-Configurable Sparse nvCIM Macro for Conventional and Spiking Neural Edge Inference"
(Tenwar, Lokhande, Vishvakarma). It is an independent rendering of that description, not the
authors' code. Where the publication leaves a detail open, this RTL makes its own choice, and
the sections below say which is which.

## What one operation computes

The array has 64 banks. Each bank has 64 rows by 4 columns, so it holds 64 weights of 4 bits
(64 x 64 x 4 = 16,384 cells). All banks share the 64 row input lines. A compute operation
therefore takes one vector of 64 activations `act[r]` (1 to 8 bits, unsigned) and returns 64
dot products at once:

    total[b] = sum over rows r with row_mask[r] = 1 of  act[r] * W[b][r]

Bank `b` is one output neuron or filter, row `r` is one input element. Longer dot products and
wider layers are split into pieces of 64 rows and 64 banks (see "Mapping a layer").

## The compute cell (`bitcell_3t1r`)

The cell is one ReRAM device, a selector transistor M1 and two compute transistors M2/M3. It
cannot be synthesized, so `bitcell_3t1r.sv` is a behavioural model with the cell's terminals.

| Operation | WL | CIM_EN | BL / SL | vwr | Effect |
|---|---|---|---|---|---|
| SET (write 1) | 1 | 0 | high / low | 1 | device goes to LRS |
| RESET (write 0) | 1 | 0 | low / high | 1 | device goes to HRS |
| compute / read | 1 | 1 | low / high | 0 | `out = in & weight` |
| anything else | - | - | - | - | no change, `out = 0` |

The stored state is a level-sensitive latch. That latch stands for the non-volatile device
itself; it is deliberate, and 16,384 of them appear in a synthesized netlist.

The publication puts the input value in two places. Its truth table encodes input 1 as BL low /
SL high, and its schematic feeds the input to M2 through a terminal `IN`. The model uses both: an
input counts as 1 only with BL low, SL high and `in` high.

Read and compute use the same BL/SL polarity as a RESET. Only the voltage differs: the read bias
is low and cannot switch the device. Logic values cannot show a voltage, so the model adds one
input, `vwr`, which means "the column drivers are at the write voltage". Without it, a row whose
CIM_EN is off during compute would see a RESET and lose its weight.

## The interleaved adder tree (`adder_tree`, `rca_interleaved`, `full_adder`)

Each bank's 64 4-bit partial products go through a balanced binary tree of ripple-carry adders.
The widths grow 4 -> 5 -> 6 -> 7 -> 8 -> 9 -> 10 bits, and 64 x 15 = 960 fits in 10 bits.

The tree's point is area. It mixes a compact 10-transistor full adder, which loses some voltage
because it uses pass transistors, with a standard 28-transistor static full adder. Inside each
ripple-carry adder the two cells alternate bit by bit. The leaf level starts with a 28T cell at
the carry-in end, the next level starts with a 10T cell, and so on. No 10T output then drives
another 10T input without a restoring 28T cell in between.

Both cells compute the exact full-adder function, so the RTL is identical for both. The
`full_adder` parameter `CELL` (`FA_28T` / `FA_10T`) only records which cell sits where, so that a
netlist or a layout flow can map it. The tree is written as a generate loop over its levels: level l
holds 64 >> l sums of 4 + l bits and is built from pairs of level l-1. The starting cell of each
level's adders follows from l.

## Bit-serial accumulation and timing (`shift_accumulator`, `cim_controller`)

In compute, all word lines are on. The controller applies bit `N-1` of every activation first,
then bit `N-2`, down to bit 0, one bit-plane per cycle. Each bank has two stages:

1. **Local 10-bit register** (`tree_q`). It holds the adder tree's sum for the current plane.
2. **Shift-add.** `pass = (first ? 0 : pass << 1) + tree_q` in an 18-bit register. On the last
   plane, `total = pass`, or `total += pass` when `acc_keep` is set. `total` is 20 bits. It
   saturates at 2^20 - 1 and raises `ovf`.

The publication calls its 10-bit registers "accumulation registers". Ten bits hold one plane's
sum but not the shifted sum over 8 planes (up to 960 x 255). Here the 10-bit register is kept,
as the per-plane register, and the wider pass and total registers are this design's own.

If a bit-plane has no active 1 input, the plane register keeps its value and the addition is
skipped. This happens often with sparse or spiking inputs; it saves switching, not cycles.

Compute timing from the edge that accepts the command:

| cycle | activity |
|---|---|
| 1 .. N | array active, plane N-1 .. 0 applied, tree result registered at the end of each |
| N+1 | last shift-add, total updated |
| N+2 | peripheral lane register (BN, ReLU, pool) updated |
| N+3 | `done` and `result_valid` high, `result` valid |

A write takes 1 cycle and a read 2 cycles. Commands do not overlap: the controller accepts a new
one in the cycle after `done`.

## Precision

* **Inputs**: 1 to 8 bits (`cfg.in_bits`). A 1-bit input is a binary activation or a spike, so
  spiking networks use the same path. Activation bits above `in_bits` are ignored.
* **Weights**: a bank holds 4-bit unsigned weights. Weights of 1 to 3 bits use the low bits.
  With `cfg.w8`, banks 2k and 2k+1 form one 8-bit weight: bank 2k holds the low nibble, bank 2k+1
  the high nibble, and `precision_combiner` outputs `lane[k] = total[2k] + 16 * total[2k+1]` for
  k < 32. The pairing order is this design's choice.
* **Signed values**: not supported. Weights and activations are unsigned. The publication only
  defines the binary case, where -1 is stored as 0.

## Peripheral lanes (`precision_combiner`, `batch_norm`, `relu`, `max_pool`, `classifier`)

Each of the 64 lanes runs: combine -> batch norm -> ReLU -> max pool / output register. Each
stage has a bypass bit in the command's configuration.

* `batch_norm` applies the folded inference form `y = sat(((x * gamma) >>> shift) + beta)`.
  `gamma` (signed 8 bits) and `beta` (signed 16 bits) are per lane and written through the `bn_*`
  port; `shift` is shared. The fixed-point form is this design's choice.
* `relu` clips negative values to zero.
* `max_pool` does 2x2 max pooling as a running maximum over four successive operations. The
  controlling host computes the four pixels of a window one after another and sets
  `cfg.pool_start` on the first. A window also opens by itself after a full one. `pool_full`
  shows that a window has completed. A compute with `cfg.partial` set leaves the pooling
  register and its window count alone; it marks the intermediate passes of a chained dot
  product (see "Mapping a layer").
* `classifier` gives the index and value of the largest of the first `n_class` lanes; ties go to
  the lower index. Softmax is monotonic, so this is also the softmax class. The probabilities
  themselves are not computed.

## Command interface (`ereCON_macro`)

One clock; `rst_n` is an asynchronous, active-low reset. A command is taken on a rising edge
where `cmd_valid` and `cmd_ready` are both high. It must hold steady while it waits; an
assertion in the controller checks this.

| `cmd.op` | uses | result |
|---|---|---|
| `OP_WRITE` | `cmd.row`, `cmd.wdata` (bank b's weight in bits 4b+3..4b) | row programmed in all 64 banks |
| `OP_READ` | `cmd.row` | `rd_data[b]` = W[b][row], with `rd_valid` |
| `OP_COMPUTE` | `cmd.cfg`, `act`, `row_mask` (sampled at acceptance) | `result[0..63]`, `ovf`, `class_idx` |

A read runs through the compute path: only the addressed row is enabled, with input 1, so the
adder tree returns that row's weight. `row_mask` turns off rows whose weights are pruned or
unused, so their cells draw no compute current.

`cim_cfg_t` fields: `in_bits`, `w8`, `acc_keep`, `partial`, `bn_en`, `relu_en`, `pool_en`,
`pool_start`.
All types and sizes are in `ereCON_pkg`. The top has no parameter list.

## Mapping a layer

Inputs are shared by all banks, so one operation handles up to 64 inputs against up to 64
filters. The host software splits a layer as follows:

* **Output channels beyond 64**: reload the array for the next group of filters.
* **Dot products longer than 64**: split the inputs into 64-row segments. There are two ways:
  * Reprogram the array between segments and set `acc_keep`, so that each bank adds the segment
    into its running total. Set `partial` on every segment but the last, so that batch norm,
    ReLU and pooling only act on the finished sum.
  * Keep the segments in different banks and add the per-segment results outside the macro.
* **Convolutions**: each output pixel is one operation (or one per segment) with that pixel's
  input patch as `act`.

Example, LeNet-5 conv2 (5x5x6 kernels, 16 filters): each filter has 150 weights, which makes 3
segments. Each of the 64 output pixels then takes 3 operations. Either the 16 filters' banks
are reprogrammed between segments, or the segments sit in 48 banks and the host adds them. The publication
maps this layer to 32 banks and 48 cycles, which needs a cross-bank combination this RTL does
not have (see below).

The accumulator does not saturate as long as (segments x 64 x max act x max weight) < 2^20. For
example: 364 segments at 2-bit inputs and 4-bit weights, 72 segments at 4/4 bits, 4 segments at
8/4 bits.

## Where this RTL departs from the publication, and what is missing

* **Analog behaviour is not modelled.** This covers ReRAM resistance, the +-1.2 V levels,
  variability and PVT corners. The cell is two logic states. Latency in ns, TOPS and TOPS/W
  are circuit results and cannot be checked here.
* **The 10-bit registers hold one plane.** The wider shift-add registers are added, as explained
  above.
* **No cross-bank summation.** The publication says a filter longer than 64 weights occupies
  three banks. With row inputs shared by all banks, as the macro figure draws them, the banks of
  one filter would need different inputs at the same time. This RTL instead chains segments over
  successive operations (`acc_keep`) or leaves the sum to the host.
* **Softmax is not computed.** Only the argmax classification is. The publication gives no
  number format or method for softmax.
* **Own choices.** The command set, the one-cycle write, the row mask, the empty-plane skip, the
  bank pairing order, all widths after the adder tree, and the batch-norm, pooling and
  classifier arithmetic.
* **Left to the host.** Spiking-neuron dynamics (membrane potential, threshold), residual
  additions and signed arithmetic are not part of the macro.

## Files

| file | content |
|---|---|
| `rtl/ereCON_pkg.sv` | constants, enums, `cim_cfg_t`, `cim_cmd_t` |
| `rtl/bitcell_3t1r.sv` | behavioural cell model |
| `rtl/reram_bank.sv` | 64 x 4 cell bank |
| `rtl/full_adder.sv`, `rtl/rca_interleaved.sv`, `rtl/adder_tree.sv` | interleaved adder tree |
| `rtl/wl_decoder.sv`, `rtl/input_ctrl.sv`, `rtl/rw_ctrl.sv` | row and column drivers |
| `rtl/cim_controller.sv` | command FSM and bit-serial sequencing |
| `rtl/shift_accumulator.sv` | per-bank register and shift-add |
| `rtl/precision_combiner.sv`, `rtl/batch_norm.sv`, `rtl/relu.sv`, `rtl/max_pool.sv`, `rtl/classifier.sv` | peripherals |
| `rtl/ereCON_macro.sv` | top level |
| `tb/tb_<module>.sv` | self-checking testbench of each module |
| `tb/tb_lenet5_workload.sv` | one complete LeNet-5 inference on the macro |
| `tb/tb_vgg16_layer_workload.sv` | the longest VGG-16 (32x32) dot product, 2-bit and spike inputs |

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops by itself. Each one also has
a watchdog that counts a failure if it hangs. Build one with plain Verilator from the repository
root, for example:

    verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
      -y rtl -y tb +libext+.sv -Irtl rtl/ereCON_pkg.sv tb/tb_ereCON_macro.sv \
      --top-module tb_ereCON_macro -o sim -j 8
    ./obj_dir/sim

The simulator is two-state; `+verilator+rand+reset+2` randomises whatever reset does not
initialise, and all testbenches pass with it. The full-size testbench `tb_ereCON_macro` runs at
the default size (64 banks, 16,384 cells). It takes about three minutes to build and under a
second to run. It does the following:

* programs random weights and reads them back;
* runs operations at every input precision, with 4- and 8-bit weights, masked rows, sparse
  binary inputs, chained passes, batch norm, ReLU, pooling windows and saturation;
* compares every lane with an integer model;
* checks the cycle counts (N array cycles, N+3 latency);
* runs chained passes marked `partial` under pooling;
* fails if any of these mechanisms never occurred.

`tb_lenet5_workload` runs one complete LeNet-5 inference at 2-bit activations and 4-bit
weights, with random weights and image from a fixed seed. Layers: conv1 5x5x1->6, pool,
conv2 5x5x6->16, pool, conv3 1x1x16->120, fc1 1920->84, fc2 84->10, argmax. Every
multiply-accumulate, batch-norm offset, ReLU and pooling step runs in the macro. Dot products
longer than 64 are chained segments, and the array is reprogrammed between them. The testbench
requantises each layer's outputs to 2 bits, as a host would. It compares every output with an
integer model. The inference takes 862 compute operations, 13,581 row writes and about 32,700
cycles, most of them in reprogramming. The same fc1 outputs then also go through a 26-class
last layer, the letters variant of the network. It takes about a minute to build and run.

`tb_vgg16_layer_workload` runs the longest dot product of VGG-16 on 32x32 images: a 3x3x512
convolution, which has 4,608 inputs per output. It runs one output pixel for 64 filters with
2-bit weights, as 72 chained segments with reprogramming. It covers random 2-bit activations,
the all-maximum case (41,472, exact and with no overflow), and binary spike inputs. It takes
about a minute to build and run.

Each block testbench also compares its module with independently computed values. Each was run
against a deliberately broken copy of its module and failed, as it should.
