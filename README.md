# Bit-serial binary neural network for 28×28 digit classification

This design classifies a binarized 28×28 handwritten-digit image with a fully
connected binary neural network. The network has 784 inputs, hidden layers of
128 and 64 neurons, and 10 outputs. Weights and activations are single bits,
so a multiply-accumulate becomes an XNOR followed by a count of ones
(popcount). A batch-normalisation layer followed by a sign function becomes
one integer comparison. There are no multipliers. The only arithmetic is a
10-bit counter per neuron, a subtractor and a comparator. A configurable
number of neurons, `PAR` (64 by default), is computed side by side. Each of
them consumes one input bit per clock.

The architecture follows a published FPGA design for the Artix-7 / Nexys A7-100T
board: the layer sizes, the XNOR-popcount neuron, thresholds folded from batch
normalisation, weight ROMs with one neuron per row, LUT ROMs for the
thresholds, one central five-stage FSM, an argmax, a seven-segment display and
64-way parallelism. That publication gives the blocks and their functions but
not their insides. The RTL here fills those gaps in the simplest way that
reproduces the published behaviour. With one neuron group costing N+2 cycles,
the cycle counts agree with the published latencies for every parallelism
level from 1 to 64 to within 5.5 cycles, 0.31% or less (see *Latency*). The trained weights and the
MNIST test images are **not** included. The ROMs hold hash-generated
placeholder contents (see *ROM contents*), so the engine computes a correct
binary network, but not one that recognises digits.

## Arithmetic

A bit value of 1 stands for +1 and 0 for −1, for weights, pixels and
activations alike. For input vector `x` and weight vector `w` of length `N`:

* `m = popcount(XNOR(x, w))` counts the positions where the signs agree;
* `z = 2m − N` is then exactly the ±1 dot product `Σ xᵢ·wᵢ`;
* in a hidden layer the neuron outputs `1` when `z ≥ θ`. Here θ is the
  neuron's batch-norm parameters folded offline into one 11-bit signed
  integer: `θ = round(β − μ/√(σ²+ε))`. This replaces batch normalisation
  followed by `sign`.
* the output layer has no threshold. Its ten `z` values are the class scores,
  and the predicted digit is the index of the largest one. On a tie the lower
  index wins.

`|z| ≤ 784`, so `z` and θ fit in 11-bit two's complement (`SUM_W`, `TH_W` in
`bnn_pkg`).

## How a layer is computed: lanes, groups and bits

This is the central idea of the datapath. The engine has `PAR` identical
*lanes* (`neuron_pe`). Lane `k` computes neurons `k`, `k+PAR`, `k+2·PAR`, …
of every layer. A layer with `M` neurons and `N` inputs is processed in
`G = ceil(M/PAR)` *groups*. In group `g` every lane works on neuron
`g·PAR + k`:

| step   | cycles | what happens |
|--------|--------|--------------|
| load   | 1      | every lane's weight ROM reads row `g`, the full N-bit weight vector of its neuron; popcounts are cleared |
| accumulate | N  | in cycle `i` the input bit `xᵢ` is broadcast to all lanes; each lane XNORs it with bit `i` of its weight row and counts a match |
| store  | 1      | hidden layer: each lane's `z ≥ θ` decision is written into the layer's activation register at position `g·PAR+k`; output layer: each lane's `z` is written into the score register |

The input bits come from the selected image for layer 1 and from the
128-bit and 64-bit activation registers (`act_buffer`) for layers 2 and 3.
So each neuron reads a single weight row per group, and no data moves between
lanes. Lanes whose neuron index is past the end of the layer (for example
lanes 10–63 in the output layer) still count, but their ROMs are absent
(their weights read as 0) and their results are not stored.

At `PAR = 64`, layer 1 takes two groups and layers 2 and 3 take one each. Because
the output layer also ends with a store cycle, the ten scores are complete even
when `PAR < 10`: at `PAR = 4` the output layer takes 3 groups.

## Control sequence

`bnn_fsm` holds a stage (`state_e`) and a step within the group (`phase_e`):

```
reset released
  S_L1       G1 groups × (load, 784 × accumulate, store→act1)
  S_L2       G2 groups × (load, 128 × accumulate, store→act2)
  S_OUT      G3 groups × (load,  64 × accumulate, store→scores)
  S_CLASSIFY 1 cycle argmax_start, then wait for argmax_done (10 cycles)
  S_DONE     done = 1, result and display held until the next reset
```

Inference starts by itself when `rst_n` goes high, and nothing restarts it
except another reset. `argmax_unit` loads score 0 on `argmax_start`,
then compares one further score per cycle and pulses `done` after the tenth
class. Two assertions in `bnn_fsm` check the protocol: at most one of the
clear / accumulate / store / start strobes is active in a cycle, and `done`
never falls without a reset.

## Latency

Counting from the first clock edge after reset to the first cycle with
`done` high:

```
cycles = ceil(128/PAR)·786 + ceil(64/PAR)·130 + ceil(10/PAR)·66 + 11
```

| PAR | cycles | at 10 ns | published latency | difference |
|----:|-------:|---------:|------------------:|-----------:|
|   1 | 109 599 | 1 095 990 ns | 1 096 045 ns | −0.005% |
|   4 |  27 441 |   274 410 ns |   274 465 ns | −0.02% |
|   8 |  13 759 |   137 590 ns |   137 645 ns | −0.04% |
|  16 |   6 885 |    68 850 ns |    68 905 ns | −0.08% |
|  32 |   3 481 |    34 810 ns |    34 865 ns | −0.16% |
|  64 |   1 779 |    17 790 ns |    17 845 ns | −0.31% |
| 128 |     993 |     9 930 ns |     9 865 ns | +0.66% |

At PAR = 1 to 64 the difference is a constant 5.5 cycles. This suggests a
slightly longer fixed start-up or finish in the original. The 128-lane figure
came from a LUT-only build.

The published latencies fit this cycle count at a **10 ns** clock. They do
not fit the stated 80 MHz operating clock, at which 1 779 cycles take
22.2 µs. The table therefore reads them as simulation time at 10 ns per cycle.

## Memories

* **Weight ROMs** (`weight_rom`), one per lane and layer. The ROM of lane `k`
  in a layer with `N` inputs has `ceil(M/PAR)` rows of `N` bits. Row `r` holds
  the weights of neuron `r·PAR+k`, bit `i` being the weight of input `i`, so
  the weight matrices are stored transposed, one neuron per row. Reads are
  synchronous, like a block RAM, and the output holds while the enable is low.
  Each ROM has two read ports, as a dual-port block RAM does. The controller
  uses port A only, as in the original design, which processed one neuron per
  lane at a time and left the second port's bandwidth unused. The array carries
  `rom_style = "block"`. Set it to `"distributed"` for the LUT-ROM variant that
  the original design measured alongside.
* **Threshold ROMs** (`threshold_rom`), one per lane per hidden layer, with
  an 11-bit signed entry per row and a combinational (LUT) read.
* **Image ROM** (`image_rom`), `NUM_IMAGES` = 10 rows of 784 bits. Pixel `i`
  is row-major (`i = 28·row + column`). `img_sel` picks the image.
* **Activation and score registers** (`act_buffer`): flip-flops, 128 + 64 bits
  of activations and 10 × 11 bits of scores.

### ROM contents

Every ROM is initialised from a function in `bnn_pkg`, not from a data file.
Each function produces 16 bits at a time from the 32-bit avalanche hash
`mix32(v)`: `v ^= v>>16; v *= 0x7feb352d; v ^= v>>15; v *= 0x846ca68b;
v ^= v>>16`.

* weights: `weight_chunk(l, n, c) = lo16(h) ^ hi16(h)`, where
  `h = mix32(l·2²⁴ + n·2¹² + c)` covers inputs `16c … 16c+15` of neuron `n` in layer `l`;
* thresholds: `threshold_val(l, n) = (mix32(0x5a000000 + l·2¹⁶ + n) mod 33) − 16`;
* pixels: `pixel_chunk(img, c) = lo16(h) & hi16(h)` with
  `h = mix32(0xc3000000 + img·2¹² + c)`, which gives about 25% ones.

These contents are placeholders. To run a trained network, replace the three
functions, or the `initial` blocks of the three ROM modules, with the trained
bits. The datapath does not depend on them. For weights, use one row per
neuron with bit `i` = input `i`, 1 for +1. For thresholds, use
`round(β − μ/√(σ²+ε))` as 11-bit two's complement. With the placeholders the
hidden activations are well mixed, and the predicted class varies from image
to image. The class means nothing.

## Top-level interface (`bnn_top`)

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk` | in | 1 | clock (80 MHz on the original board) |
| `rst_n` | in | 1 | active-low asynchronous reset. Inference starts when it is released. |
| `img_sel` | in | `IAW` (4) | image to classify, stable until `done` |
| `done` | out | 1 | result valid, held until reset |
| `digit` | out | 4 | predicted class 0–9 |
| `seg` | out | 7 | segments a–g (`seg[0]` = a), active low, blank until `done` |
| `an` | out | 8 | digit enables, active low; only `an[0]` is used, so `an[7:1]` are constant 1 |

Parameters: `PAR` (lanes, default 64, any value 1…128) and `NUM_IMAGES`
(default 10). The layer sizes are package constants (`N_IN`, `N_H1`, `N_H2`,
`N_OUT`). They are not parameters of the top, because the three-layer
sequence is built into the controller, as it was in the original design.
`bnn_fsm` itself takes the sizes as parameters and is tested on a smaller
network.

## Where this RTL departs from, or adds to, the original description

* **Bit-serial neurons, N+2 cycles per group.** The original text does not
  say how many input bits a neuron consumes per cycle. One bit per cycle,
  with one load cycle and one store cycle per group, is the choice that
  reproduces its latency table.
* **Score register and output store cycle.** These were added so that fewer
  than 10 lanes still classify. The original's latency overhead also counts
  the output groups.
* **Raw integer scores.** The output layer's 2m−N sums are compared directly.
  The original keeps floating-point logits only in its software model. Its
  hardware also compares raw sums.
* **Argmax tie rule.** Ties go to the lowest index. The original does not say.
* **Image selection.** An `img_sel` input and a 10-image ROM were added. The
  original loads one image per simulation or build.
* **Reset and start.** Reset is active-low and asynchronous, and inference
  starts on reset release. The original says only that the result is held
  until reset.
* **Seven-segment polarity.** Active-low segments and anodes, rightmost digit
  only, as on the Nexys A7's common-anode display.
* **ROM contents.** Hash placeholders instead of trained data (see above). The
  published 84/100 accuracy on MNIST cannot be reproduced with them.
* **Not modelled.** Clock generation (only 80 MHz is stated), the board, and
  the offline training and export flow.

## Files

| file | contents |
|------|----------|
| `rtl/bnn_pkg.sv` | sizes, widths, `state_e`/`phase_e`, ROM-content functions |
| `rtl/bnn_top.sv` | top level: lanes, ROMs, registers, FSM, argmax, display |
| `rtl/bnn_fsm.sv` | controller |
| `rtl/neuron_pe.sv` | XNOR-popcount lane with threshold compare |
| `rtl/weight_rom.sv`, `rtl/threshold_rom.sv`, `rtl/image_rom.sv` | ROMs |
| `rtl/act_buffer.sv` | activation and score registers |
| `rtl/argmax_unit.sv` | sequential argmax |
| `rtl/seg7_decoder.sv` | display decoder |
| `tb/tb_ref_pkg.sv` | reference model: ROM contents and full inference written independently |
| `tb/tb_<module>.sv` | self-checking unit test of each module |
| `tb/tb_bnn_top.sv` | end-to-end test at the default size (all 10 images, plus a reset in mid-inference) |
| `tb/tb_bnn_100_images.sv` | 100 images in a row with a 100-image ROM, the size of the original correctness run |
| `tb/tb_bnn_par_sweep.sv` | end-to-end at 1, 4, 8, 16, 32 and 128 lanes, with latency checked against the formula and the published figures |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself, and
each has a watchdog. With Verilator 5, from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_bnn_top \
    -y rtl -y tb +libext+.sv -Irtl -Itb rtl/bnn_pkg.sv tb/tb_ref_pkg.sv tb/tb_bnn_top.sv
./obj_dir/Vtb_bnn_top
```

Replace `tb_bnn_top` with any other testbench name. The full-size end-to-end
test runs 11 inferences in well under a second of simulation time. The
simulator is two-state, and every register that is read is reset or written
first.

`tb_bnn_top` compares, for each image, both activation registers, the ten
scores, the digit, the display pattern and the latency with the reference
model. It also counts that each mechanism occurs: the three layer changes, a
layer split over two groups, a group with idle lanes, threshold stores, argmax
updates, an argmax tie, the held result and a restart after a reset in
mid-inference.
