# Sparse edge-processing trainer for deep neural networks

This is register-transfer-level SystemVerilog for an accelerator that trains
fully-connected-style neural networks on chip ("online"), not just runs
inference. It rests on two ideas:

* **Pre-defined sparsity.** Every neuron connects to only a fixed number of
  neurons in the next layer (its *fan-out*), chosen before training and never
  changed. A (1024, 64, 16) network with fan-out 8 has 8 704 weights instead
  of 66 560 (87 % sparse). The connections are set by a deterministic
  *interleaver* so that they look random.
* **Edge processing.** The hardware is organised around the connections
  (edges), not around neurons. Each junction between two layers handles `Z`
  edges per clock cycle, whatever the layer sizes are. So the number of
  multipliers is set by `Z`, not by the network. Feedforward (FF),
  backpropagation (BP) and weight update (UP) all walk the same edges in the
  same order. They therefore run together, each on a different training input,
  and all junctions run at once as a pipeline.

The configuration built here is the one the design is evaluated with: layers
(1024, 64, 16), fan-out 8 in both junctions, `Z = 512` for the first junction
and `Z = 32` for the second, and 10-bit fixed point. Both junctions then need
16 cycles to sweep their edges: 8192/512 = 512/32 = 16. The pipeline takes
in a new training input every 16 cycles. After that input leaves, its weight
updates are complete five 16-cycle slots later.

## Edge numbering and the two access orders

A junction from a left layer of `NL` neurons to a right layer of `NR` neurons
with fan-out `FO` has `E = NL*FO` edges. Each right neuron has fan-in
`FI = E/NR`. Edges are numbered in the order of the **right** neurons: right
neuron `k` owns edges `k*FI .. k*FI+FI-1`.

The weight bank is `Z` memories of `C = E/Z` words. Edge `e = n*Z + j` sits in
memory `j` at row `n`. In cycle `n` the junction reads row `n` in full: `Z`
weights of consecutive edges, and so of consecutive right neurons. This is
*natural order*. With `Z = 512` and `FI = 128`, one row covers 4 right neurons.
With `Z = 32` and `FI = 32`, it covers exactly one.

Each left layer is stored in `Z` memories too, `Z` being that of the junction
that reads it. Left neuron `i` lives in memory `i mod Z`, row `i / Z`. In cycle
`n` every left memory is read at row `n mod DL`, where `DL = NL/Z`. Lane `j` of
the junction takes the value from memory

    m(j) = (P*j + ofs[n]) mod Z

This is *permuted order*. The three terms are:

* `P` is a fixed odd stride. It costs only wiring.
* `ofs[n]` is a per-cycle offset from a rewritable table.
* The rotation by `ofs[n]` is a log2(Z)-stage barrel shifter (`lane_perm`).

Because `Z` is a power of two and `P` is odd, `j -> m(j)` is a bijection.
The `Z` lanes therefore always hit `Z` different memories, and no memory is
ever asked for two words in one cycle: the access is **clash-free**. Row
`r` of the left memories is read in the cycles `n = r (mod DL)`. There are
`C/DL = FO` such cycles, so every left neuron gets exactly its fan-out. When
`FI <= Z`, the edges of one right neuron lie in one cycle and come from
different memories. A right neuron is therefore never connected twice to the
same left neuron.

The host can rewrite the offset table at run time (the `ilv*` ports). That
changes the connection pattern without touching anything else. `P`, `STEP`
(which sets the reset contents `ofs[n] = n*STEP mod Z`) and the affine form of
the map are this implementation's choices. The design only requires a
deterministic, reconfigurable, clash-free interleaver with pseudo-random
spread.

## One junction cycle: FF, BP and UP on one weight row

`junction` reads weight row `n` once. It then does three jobs in parallel:

| op | input | computation per lane `j` | result goes to |
|----|-------|--------------------------|----------------|
| FF | newest | `w*a_left`, summed over the lanes of each right neuron; then `f` and `f'` | right layer's activation and derivative banks (natural order) |
| BP | older | `w*delta_right`, scattered back to memory order by the inverse permutation | left layer's delta bank, read-modify-write (permuted order) |
| UP | older still | `w - 2^-eta * a_left * delta_right` | same weight row, written one cycle later |

Backpropagation is the least obvious part. A left neuron's delta is
`f'(left) * sum(w * delta_right)` over its `FO` edges. Those edges are spread
over `FO` different cycles. So the delta bank holds a running partial sum. At
the first visit of a row (`n < DL`) the partial sum is overwritten. Later
visits add to it. At the last visit (`n >= C - DL`) the sum is multiplied by
the stored derivative and becomes the final delta. No extra pass over the
layer is needed. The interleaver supplies the `first_visit` and `last_visit`
flags.

The update reads the same row as FF and BP. It registers the new row and
writes it back in the following cycle. At any moment one row is being read and
the previous one written: two rows of the single weight bank are active.

If `FI > Z`, one right neuron spans `FI/Z` cycles. FF then adds into a
full-precision accumulator register and produces the neuron on the last of
those cycles. The top-level configuration does not need this case, but
`junction_tb` tests it.

The whole path runs in one clock cycle, with no pipeline registers inside it
other than the write-back register. That path is: bank read, lane
permutation, multipliers, adder tree, activation, bank write. This is simple
and exact, but the critical path is long. A real implementation at the
targeted 250 MHz would add pipeline stages inside the junction.

## Junction pipelining and the queues

A *slot* is `C` cycles. In slot `t`, with `J` junctions numbered from 0,
junction `j` runs three operations on three different inputs:

    FF on input t - j      BP on input t - (2J-1-j)      UP on input t - (2J-j)

For the two-junction network this gives the following table:

| slot t      | junction 0 (Z = 512) | junction 1 (Z = 32) |
|-------------|----------------------|---------------------|
| FF          | input t              | input t-1           |
| BP          | (none)               | input t-2           |
| UP          | input t-4            | input t-3           |

The host loads input `t+1` during slot `t`.

All of an input's activations, derivatives and deltas must survive until that
input reaches the UP stage. Newer inputs are being written at the same time.
Every layer bank is therefore a queue of copies, indexed by input number
modulo the depth:

| bank | written in slot | last read in slot | depth |
|------|-----------------|-------------------|-------|
| input layer (activations) | m-1 | m+4 (UP of junction 0) | 8 |
| hidden activations | m | m+3 (UP of junction 1) | 4 |
| hidden derivatives | m | m+2 (BP of junction 1) | 4 |
| hidden deltas | m+2 (accumulated) | m+4 (UP of junction 0) | 4 |
| output deltas | m+1 | m+3 | 4 |

Here `m` is the input number. The depths are rounded up to powers of two.

Weights are not queued. Operations in one slot use the weights as they stood
at the start of the slot; the slot's updates apply for the next one. An input
is therefore fed forward with weights that do not yet include the updates
from the few inputs ahead of it. That is inherent to pipelined training.

The first junction has no BP hardware, because nothing uses the input layer's
deltas. The second junction's BP produces the hidden deltas.

`pipeline_ctrl` keeps two shift registers with one bit per input in flight:

* The *valid* history lets the pipeline fill and drain with bubbles. An input
  with a missing beat never updates anything.
* The *train* history records `train_en` as it was when each input was
  loaded. Inputs loaded with `train_en = 0` are only inferred.

`run = 0` freezes the whole pipeline.

## Number format

Every stored value is 10-bit two's complement with 7 fractional bits, range
[-4, 4). This covers weights, activations, derivatives, deltas and partial
sums. Arithmetic (`sen_pkg`):

* Products are exact, 20 bits wide.
* FF sums of products are exact in 32 bits and are rounded only once.
* Every store rounds toward minus infinity and saturates.
* The activation is a hard sigmoid, `clamp(1/2 + z/4, 0, 1)`. Its derivative
  is 1/4 for `|z| < 2` and 0 elsewhere.
* The learning rate is `2^-eta_shift`.
* The output-layer delta is `a - onehot(label)`, which is the delta for
  sigmoid outputs with a cross-entropy cost.

For 12- or 16-bit variants, change `W` and `FRAC` in `sen_pkg`.

## Top level: `sparse_dnn_top`

The data flow is:

    in_data --> act_queue_bank (input, Z=512, depth 8) --> junction 0 (Z=512, FF+UP)
          --> act_queue_bank x2 (hidden act/deriv, Z=32) + delta_queue_bank (hidden deltas)
          --> junction 1 (Z=32, FF+BP+UP) --> output_delta (a - onehot(label)) --> out_*

**Host protocol.** Assert `run`. In each cycle `n` of a slot, drive pixels
`64n .. 64n+63` of the next input on `in_data` with `in_valid` high. Hold its
class on `in_label` (sampled in cycle 0), and set `train_en`. Pad 28x28
images to 1024 pixels with zeros. Output activations of input `out_id` appear
on `out_act` one neuron per cycle, marked by `out_valid`. They appear one slot
after the input entered. `busy` stays high while inputs are in flight.

**Configuration** (with `run` low):

* `w1_*` and `w2_*` load and read back single weights. Weight `e` of a
  junction is at row `e / Z`, lane `e % Z`.
* `ilv1_*` and `ilv2_*` rewrite interleaver offsets.

Weights have no reset value and must be loaded before training.

## Files

| file | contents |
|------|----------|
| `rtl/sen_pkg.sv` | number format, activation, update arithmetic |
| `rtl/lane_perm.sv` | clash-free memory/lane permutation (gather and scatter) |
| `rtl/interleaver.sv` | offset table, row and first/last-visit flags |
| `rtl/weight_bank.sv` | Z x C weight memories, write-back and config port |
| `rtl/act_queue_bank.sv` | activation / derivative queue bank |
| `rtl/delta_queue_bank.sv` | delta queue bank with read-modify-write port |
| `rtl/output_delta.sv` | output error and its queue |
| `rtl/junction.sv` | edge processor: FF, BP, UP |
| `rtl/pipeline_ctrl.sv` | cycle/slot counters and the junction schedule |
| `rtl/sparse_dnn_top.sv` | the (1024, 64, 16) trainer |
| `tb/*_tb.sv` | one self-checking testbench per module, plus `training_workload_tb` |

## Verification

Every testbench checks itself. It prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

`sparse_dnn_top_tb` runs the top at its default size. It does the following:

1. Loads random weights.
2. Rewrites half of junction 1's interleaver table.
3. Streams ten random inputs. One of them has a missing beat (a bubble) and
   two are marked inference-only. The run includes a three-cycle stall.
4. Compares every output activation, and after draining every one of the
   8 704 weights, with a reference model.

The reference model is neuron-oriented. It is written from the connection
formula above and the slot schedule, not from the lane hardware. The
testbench also checks the throughput (16 cycles per slot). It checks that each
of these mechanisms occurred: bubble, stall, inference-only input and
interleaver rewrite.

`training_workload_tb` trains the default-size top online, one input per
16 cycles, on a synthetic 16-class task. Each class is a random binary
1024-pixel prototype, and every input is its prototype with 4 % of the pixels
flipped. The testbench classifies each input by the arg-max of its output
activations. It requires the accuracy over the last 100 of 800 inputs to
exceed 50 % and to beat the first 100. In a typical run, accuracy rises from
chance (about 7 %) to 100 %. This stands in for the handwritten-digit
training the design targets; no image data is shipped.

`junction_tb` exercises the fan-in-larger-than-`Z` case, including BP. The
block testbenches cover the permutation's clash-freedom, and cover the queue
banks slot by slot.

To run one testbench with plain Verilator:

    verilator --binary --timing --assert -Irtl rtl/sen_pkg.sv tb/sparse_dnn_top_tb.sv \
              -y rtl --top-module sparse_dnn_top_tb
    ./obj_dir/Vsparse_dnn_top_tb

The full-size top builds in under half a minute and simulates in well under a
second.

## Where this design goes beyond, or departs from, the described architecture

* The interleaver rule, the offset table and its reset values are this
  design's own. So are the number of read ports per bank and the queue
  depths. The architecture only specifies that the interleaver is clash-free,
  reconfigurable and pseudo-random, and that the banks are queues.
* The activation function, the output cost, the rounding, the power-of-two
  learning rate and the absence of biases are this design's own choices. None
  of them is specified.
* The first junction omits backpropagation. The described schedule has every
  junction doing BP, but the first junction's result has no consumer.
* The top level is fixed at three layers. The blocks themselves are generic
  in sizes, fan-out and `Z`. A deeper network, such as the four-layer
  fully-connected part of AlexNet used as a speed example (1728, 4096, 4096,
  1000), needs another top with more junctions and banks, and about
  1.7 million weights of storage.
* Only the 10-bit format is built by default. The 12- and 16-bit comparisons
  need a change to `sen_pkg`.
* `Z`, the fan-in and the layer sizes must be powers of two. This is required
  by the odd-stride interleaver and by the grouping of lanes into neurons.
  An arbitrary `Z`, such as a six-lane example with fan-in 3, would need a
  different clash-free permutation.
* The output layer's deltas are held in a plain array read in natural order,
  not in a bank of `Z` memories. No junction reads the output layer in
  permuted order.
* Host, dataset and weight initialisation are outside the design.
