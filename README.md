# Sparse neural network training on an FPGA: SystemVerilog model

This design trains and runs a small neural network entirely in hardware. It
is cheap enough for a small FPGA because the network is sparse by
construction. The sparsity is fixed before training. Each neuron of a layer
has a fixed, small number of connections to the previous layer: the fan-in
`d_in` on the right side of a layer pair and the fan-out `d_out` on the left
side. The connection pattern never changes, so the hardware can be built
around it. No index memories are needed, no pruning, and the memories never
collide.

The default configuration classifies MNIST digits:

| | junction 1 | junction 2 |
|---|---|---|
| left neurons | 1024 (784 pixels + zero padding) | 64 |
| right neurons | 64 | 32 (10 classes + zero padding) |
| fan-out `d_out` | 4 | 16 |
| fan-in `d_in` | 64 | 32 |
| weights `W` | 4096 | 1024 |
| weights per clock `z` | 128 | 32 |
| weight cycles per input `W/z` | 32 | 32 |

A *junction* is the set of weights between two neighbouring layers. The
network has 5216 trainable parameters: 5120 weights and 96 biases. The
activation is a sigmoid and the cost is cross-entropy. Training uses plain
gradient descent with a power-of-two learning rate.

## Number format

Every stored or computed quantity uses one signed fixed-point format of 12
bits: a sign bit, 3 integer bits and 8 fractional bits. That covers
activations `a`, their derivatives `a'`, deltas, weights and biases. The
range is [-8, 8 - 2^-8]. No operation widens the format. Each adder and
multiplier clips a result that does not fit to +7.996 or -8 (`sat_add`,
`sat_mul`, and the functions in `nn_pkg`). Products drop their low 8
fractional bits by truncation towards minus infinity.

The learning rate is `eta = 2^-s`. The update multiplication therefore
becomes a shift. The full product `a*delta` is shifted right by `8 + s` and
then clipped. The shift `s` is 3 for epochs 0 and 1. It then grows by one
every 4 epochs (4 from epoch 2, 5 from epoch 6, and so on), up to 7 from
epoch 14 on.

The sigmoid and its derivative come from a 4096-entry table (`sigmoid_lut`)
indexed by the 12-bit argument. `sigma` is rounded to 8 fractional bits and
`sigma'` to 6 fractional bits, because `sigma'` never exceeds 1/4. The table
is computed from the formula when the ROM is initialised.

## Edge processing: `z` weights per clock

The unit of work is the edge (weight), not the neuron. Junction `i` handles
`z_i` weights per clock, so one pass over the junction takes `W_i/z_i`
*weight cycles*. Both junctions have the same count (32), so neither waits
for the other.

Weights are numbered in natural order on the right side. Weight cycle `k`
therefore covers `z/d_in` complete right neurons: neurons `k*z/d_in` and
onwards. Because `z >= d_in`, the feedforward sum of a neuron finishes in one
clock through an adder tree of depth `log2(d_in)` (`adder_tree`). No
feedforward partial sums are stored.

The `z` weights of cycle `k` sit in cell `k` of `z` weight memories
(`weight_mem`), so one read fetches them all. The biases of the `z/d_in`
neurons of that cycle sit in extra bias banks beside them, addressed the same
way.

### Left-side access and the interleaver

Seen from the left side, the same `z` weights connect to `z` scattered left
neurons. The left layer is stored in `z` banks (`bank_mem`). Left neuron `n`
lives in bank `n mod z` at address `n div z`, so each bank is `D = N_left/z`
deep. For clash-free access, the `z` left neurons used in one clock must sit
in `z` different banks. Then every bank is read exactly once per clock and
nothing ever stalls.

The `interleaver` produces such access patterns:

* A block cycle of `W/z` weight cycles splits into `d_out` sweeps of `D`
  cycles each.
* In cycle `c` of sweep `s`, bank `m` is read at address
  `(SV[s][m] + c) mod D`. `SV[s]` is the start vector of the sweep.
* Weight lane `p` (0 ≤ p < z) is connected to bank `(p + ROT[s]) mod z`.

Over one sweep, every bank walks through all its `D` addresses once.
Therefore:

* Every clock touches each bank exactly once (clash freedom).
* Every left neuron gets exactly one edge per sweep, so `d_out` edges in
  total (fixed fan-out).
* The `d_in` lanes of one right neuron hit `d_in` different banks, so no
  weight is duplicated.

The start vectors and rotations are pseudo-random but fixed. They are
computed once from an integer hash with a seed per junction, and together
they define the network's connection pattern. The feedforward, back-
propagation and update operations all use this same pattern. In the default
configuration:

* junction 1 has `D = 8` and 4 sweeps;
* junction 2 has `D = 2` and 16 sweeps.

Right-side values are accessed in natural order: `z/d_in` consecutive
neurons per clock. A right layer that the next junction reads in permuted
order has as many banks as that junction's `z`. For example, layer 1 has 32
banks of depth 2. Junction 1 writes its 2 neurons per clock into 2
different banks of that layer.

## One junction: three operations in one pass

The `junction` module reads each weight cell once per block cycle and shares
it among three operations. Each operation works on a different input:

* **FF (`ff_unit`)**, feedforward: `z` multipliers, one adder tree, bias
  adder and sigmoid table per right neuron. It produces `a` and `a'` for the
  right layer.
* **BP (`bp_unit`)**, back-propagation; only in junctions with a delta on
  their left, so not junction 1. Each lane forms `a'_left * (w * delta_right)`
  with two multipliers. It adds the result to the partial sum of its left
  neuron, held in the left layer's delta memory (read-modify-write). The
  first sweep starts the sum and later sweeps add to it. After `d_out`
  sweeps each left neuron holds its finished delta.
* **UP (`up_unit`)**, update: `w -= eta * a_left * delta_right` for every lane
  and `b -= eta * delta_right` for every neuron of the cycle. The new values
  go back into the weight cell they were read from.

Each weight cycle passes through three pipeline stages, so a block cycle
lasts `W/z + 2` clocks. That is 34 clocks, or 2.27 µs at 15 MHz.

| stage | work |
|---|---|
| A | count `k`, split it into sweep and cycle, get the bank addresses from the interleaver, register them |
| B | read the weights, biases and layer memories; do all the arithmetic; register the results |
| C | write cell `k` of the weight memory (one clock after cell `k` was read), the BP partial sums and the FF outputs |

Cell `k` is written in the same clock that reads cell `k+1`. The weight
memory therefore needs one read port and one write port: a simple dual-port
RAM.

**BP bypass.** Cycle `k+1` may read in stage B the partial sum that cycle `k`
is writing in stage C. This happens when a bank's last address in one sweep
equals its first address in the next. The junction detects the matching
bank and address and forwards the stage-C data. Without this, that partial
sum would lose one term. With `D = 2` in junction 2, it occurs several times
per block cycle.

## Junction pipelining: all junctions busy on different inputs

The two junctions start their block cycles together. In block cycle `t`:

| | operation | input |
|---|---|---|
| junction 1 | FF | `t` |
| junction 2 | FF and cost (`delta_2 = a_2 - y`) | `t-1` |
| junction 2 | BP and UP | `t-2` |
| junction 1 | UP, using the `delta_1` that junction 2 finished in the previous block | `t-3` |
| input loader | loads the image | `t+1` |

In steady state, one input enters and one finishes per block cycle. The FF
of a block cycle sees the weights as they were when that block cycle
started.

Several inputs are in flight at once. Each layer memory therefore holds one
copy per live input, and input `n` uses copy `n mod COPIES`:

| memory | banks × depth | copies | writer | readers |
|---|---|---|---|---|
| `a_0` | 128 × 8 | 8 | loader (`t+1`) | J1 FF (`t`), J1 UP (`t-3`) |
| `a_1` | 32 × 2 | 4 | J1 FF (`t`) | J2 FF (`t-1`), J2 UP (`t-2`) |
| `a'_1` | 32 × 2 | 4 | J1 FF (`t`) | J2 BP (`t-2`) |
| `delta_1` | 32 × 2 | 2 | J2 BP (`t-2`) | J1 UP (`t-3`) |
| `delta_2` | 1 × 32 | 2 | cost unit (`t-1`) | J2 BP/UP (`t-2`) |

`nn_ctrl` keeps four pipeline slots. Each slot holds one input's:

* valid bit;
* sequence number, which selects the memory copy;
* index in the epoch, which addresses the label;
* epoch, which sets the learning rate.

The slots shift at every block start. A block cycle starts only when both
junctions are ready and, if an input is due, that image has been fully
received. Otherwise the controller stalls. After the last input it runs
three more block cycles to empty the pipeline, then pulses `done`.

## Around the core

* `uart_rx` receives 8N1 bytes. The default is 130 clocks per bit, which is
  115200 baud at 15 MHz.
* `input_loader` turns pixel `p` into activation `p/256` of neuron `n`. It
  accepts bytes only while `uart_cts` is high, which allows at most one
  image ahead of the pipeline. Neurons 784 to 1023 are never written and
  stay 0.
* `label_mem` holds one 10-bit one-hot word per training input, 12544 words,
  written through its single port before a run.
* `cost_unit` forms `delta_2 = a_2 - y`, with `y = 0` for the 22 padding
  outputs. It also picks the largest of the 10 real outputs and reports the
  class, whether it was correct, and a one-hot `led` vector.
* `result_log` keeps the last 16 results of a run (one-hot class and
  correct bit) so that they can be stepped through on the 10 LEDs. `log_sel`
  picks an entry, and `log_led` / `log_correct` show it one clock later.

### Running the top level (`sparse_nn_top`)

1. Write the labels through `lbl_we`, `lbl_addr` and `lbl_wdata`.
2. Set `epoch_len`, `num_epochs` and `train_en`, then pulse `start`.
3. Send the images over `uart_rxd`, each one once `uart_cts` is high. Send
   the data set again for every epoch.

One result (`result_valid`, `result_idx`, `result_class`, `result_correct`)
appears per input. With `train_en = 0` the network only does FF; weights do
not change.

## Files

| file | content |
|---|---|
| `rtl/nn_pkg.sv` | number format, clipping arithmetic, interleaver hash, learning-rate schedule |
| `rtl/sat_add.sv`, `rtl/sat_mul.sv` | clipping adder and multiplier |
| `rtl/adder_tree.sv` | clipping adder tree |
| `rtl/sigmoid_lut.sv` | sigma and sigma' tables |
| `rtl/interleaver.sv` | clash-free address generator |
| `rtl/weight_mem.sv` | weight+bias memory with Glorot-normal start values |
| `rtl/bank_mem.sv` | banked, multi-copy layer memory |
| `rtl/ff_unit.sv`, `rtl/bp_unit.sv`, `rtl/up_unit.sv` | arithmetic of the three operations |
| `rtl/junction.sv` | one junction with its 3-stage pipeline |
| `rtl/cost_unit.sv` | output delta and classification result |
| `rtl/result_log.sv` | stored results for the LEDs |
| `rtl/label_mem.sv`, `rtl/uart_rx.sv`, `rtl/input_loader.sv` | input side |
| `rtl/nn_ctrl.sv` | block-cycle sequencer |
| `rtl/sparse_nn_top.sv` | the whole network |
| `tb/tb_<module>.sv` | self-checking testbench per module |
| `tb/tb_ref_pkg.sv` | reference arithmetic and connection rule for the testbenches |
| `tb/tb_top_body.svh` | end-to-end test with a bit-accurate model of pipelined training |
| `tb/tb_sparse_nn_full.sv` | end-to-end test at the default size |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops. For
example, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/nn_pkg.sv tb/tb_ref_pkg.sv \
    tb/tb_sparse_nn_top.sv --top-module tb_sparse_nn_top -Mdir obj -o sim
obj/sim
```

Swap in another testbench's file and module name to run it. The testbenches
also pass when all uninitialised state starts random
(`+verilator+rand+reset+2`).

The end-to-end tests (`tb_sparse_nn_top` at 128-32-16 neurons,
`tb_sparse_nn_full` at the default size) work as follows:

* They replay every block cycle in a software model that follows the
  pipeline schedule above. The model uses its own clipping arithmetic, the
  exp()-based sigmoid and the interleaver rule.
* They require every result, and every weight and bias after the run, to
  match bit for bit.
* The small test trains 3 epochs of 4 images, so the learning rate changes
  once. It then runs 4 images in inference mode and checks that no weight
  moved.
* After each run they read back every entry of the result log.
* Both tests count how often the stall, the BP bypass, back-to-back block
  cycles of exactly `W/z+2` clocks, learning-rate changes and inference
  blocks occurred. They fail if one never happened.

At the default size the full test trains on one 784-pixel image and infers
one, over the real-speed UART. That is about 2 million clocks, a few tens of
seconds of simulation after a two-minute build.

## Changing the size

All sizes are parameters of `sparse_nn_top`. The constraints are listed
below. Elaboration-time assertions in `junction` and `sparse_nn_top` check
the first four and the last one. The interleaver and the bank addressing
assume the power-of-two sizes.

* `N1*DIN1/Z1 == N2*DIN2/Z2`: equal block cycles.
* `Z >= DIN` and `Z` a multiple of `DIN`.
* `N_left` a multiple of `Z`.
* `W/N_left` (the fan-out) a power of two.
* The bank depths `N_left/Z` are powers of two.
* `Z1/DIN1 <= Z2`.

The top is wired for two junctions. `junction` and `nn_ctrl` themselves do
not assume two. The number format is fixed by `nn_pkg`; changing it means
editing the package and regenerating nothing else.

## What follows the published design and what is filled in here

These parts follow the published design:

* the network sizes and the degrees of parallelism;
* the (12,3,8) format with clipping;
* the sigmoid table and its accuracies;
* edge processing with one weight read shared by FF, BP and UP;
* the simple dual-port weight+bias memory, written one cell behind the read;
* biases stored with the weights;
* all weights and biases of a junction starting from the same `W/z`
  Glorot-normal values;
* the three-clock weight cycle and the `W/z+2` block cycle;
* the schedule of the two junctions;
* the learning-rate schedule;
* the 12544-entry label memory;
* UART input;
* 10 LEDs for the result.

These are this design's own choices; the published description does not
give them:

* **Interleaver.** The published design uses clash-free interleavers of a
  family defined elsewhere, with pre-computed start vectors. This design
  uses a start-vector-plus-rotation form with hashed values. It is clash
  free, but the connection pattern is not the original one.
* **Initial weight values.** They are Glorot-normal, but drawn from a fixed
  pseudo-random sequence.
* **Arithmetic details.** Products are truncated rather than rounded.
  Clipping happens at every adder-tree node. The learning-rate shift is
  applied before truncation.
* **BP factoring.** `a'` is applied per term: `sum a'*w*delta`, rather
  than `a' * sum w*delta`. The two agree except where clipping occurs.
  This costs two multipliers per BP lane. The published multiplier count
  is consistent with that: 224 for FF and BP, 160 for UP, which is
  128+32 FF, 2×32 BP and 128+32 UP.
* **Layer memories.** The number of copies, and one array per layer with
  ports per copy instead of separate single-port memories.
* **Pipeline control.** The BP bypass, the stall and drain behaviour, and
  the start/ready handshake between controller and junctions.
* **Interfaces.** The UART format and baud rate, the `cts` flow control,
  loading labels through the memory port, pixel scaling by 1/256, the
  argmax result, the reset scheme, and the size (16) and selection of the
  result log.

The network has not been trained on real MNIST data in simulation. The
tests establish that the hardware computes exactly what the pipelined
training algorithm specifies. They do not reproduce the published accuracy
figures.
