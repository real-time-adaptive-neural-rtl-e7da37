# Real-time adaptive neural network with dynamic classifier selection

A single neural network is rarely the best classifier everywhere in its input
space. This design keeps an *ensemble* of five small multilayer perceptrons and,
for every test instance, picks the one that is most likely to be right for that
instance, then runs only that one. The choice is made in hardware by a
**k-nearest-centroid competence estimator**: the feature space was clustered
offline with k-means, every cluster was linked to the ensemble member that
classifies it best, and at run time the instance is assigned to its nearest
centroid. Only one model is ever resident on the FPGA: it sits in a
*reconfigurable partition* and is swapped by partial reconfiguration when the
estimator asks for a different one. The logic cost is therefore that of the
estimator plus the largest model, not of all five.

The SystemVerilog here implements the programmable-logic side of that system
as described in *Real-Time Adaptive Neural Network on FPGA: Enhancing
Adaptability through Dynamic Classifier Selection* (El Bouazzaoui, Hadjoudja,
Mouhib). The structure follows the paper's block diagrams; widths, number
format, handshakes, the register map and all timing are this implementation's
own choices, listed in the section on departures below.

## One instance, end to end

```
           AXI4-Stream (DMA)                       AXI4-Lite (processor)
                 |                                        |
        +--------v---------+                      +-------v-------+
        | axis_input_buffer|---- x[0..17] ---+    | axi_lite_regs |  start / results /
        +------------------+                 |    +---------------+  centroid & weight load
                 |                           |            |
        +--------v-------------------+       |   GPIO     |
        |   competence_estimator     |       |  decouple  |
        |  centroid_rom -> 2 x DM -> |       |     |      |
        |  distances_buffer -> cmp   |       |  +--v------v-----+    reconfigurable partition
        +----------------------------+       |  | dfx_decoupler |<-->+---------------------+
                 | label (0..4)              +-------------------->  |  dnn (model RM_ID)  |
                 v                                                   +---------------------+
```

The processor drives every step:

1. The DMA streams the instance into `axis_input_buffer` (one feature per
   32-bit beat, `TLAST` on the last one).
2. The processor writes `CTRL.0`; the competence estimator computes the squared
   Euclidean distance to every centroid and reports the label stored with the
   nearest one. That label names the model to use (0 = NN1 ... 4 = NN5).
3. If the label differs from the model currently in the partition, the
   processor raises the decoupler's GPIO line, loads the partial bitstream of
   the wanted model, and releases the line. While decoupled, nothing crosses
   the partition boundary: a start is ignored and the partition's busy, done
   and result read as zero.
4. The processor writes `CTRL.1`; the model classifies the same buffered
   instance, and the class is read as an index and a one-hot label.

The input buffer refuses new beats (`TREADY` low) while the estimator or the
model is working, so the vector cannot change under them.

## The competence estimator

This is the part with the most internal structure.

**Centroid memory** (`centroid_rom`). 70 centroids of 18 signed 16-bit
coordinates, plus a 3-bit model label per centroid. In the published system it
is a ROM filled from training; here it has a load port that the processor
writes once (register `CENTROID_WR`). It has two read ports, each delivering a
whole centroid vector per cycle, one cycle after the request.

**Distance modules** (`distance_module`, two of them). Each one subtracts the
centroid from the input in 18 parallel subtractors, squares the 18 differences
in parallel, holds the squares in a register ("buffer") and sums them with an
adder tree. Both stages are registered, so a module accepts one centroid per
cycle and produces its distance two cycles later. The distance is exact
(39 bits) and no square root is taken, since the nearest centroid is the same
under the squared distance.

**Control unit** (`ce_control_unit`). Because there are only two distance
modules, the centroids are processed in passes: in pass *p* module *k* gets
centroid 2*p*+*k*. One pass is issued per cycle, so 70 centroids take 35
issue cycles. Each distance leaves its module together with a tag holding the
centroid index and label, and is written straight into the distances buffer.
When all 70 are stored, the unit starts the comparator.

**Distances buffer and comparator** (`distances_buffer`, `min_comparator`).
The buffer holds distance and label for every centroid. The comparator reads
the entries in order, one per cycle, and keeps the smallest with a strict `<`,
so among equal distances the lowest centroid index wins. It outputs the label,
the index and the distance of the winner.

**Timing.** From the start pulse to `done`: ceil(C/2) + C + 7 cycles for C
centroids, i.e. **112 cycles** for 70 centroids (35 issue cycles, 5 cycles of
pipeline and hand-over, 70 comparator reads, 2 cycles of result). The
comparator scan dominates; it is a simple, deliberate choice, since the paper
gives no timing.

## The ensemble models

**Neuron** (`hidden_neuron`). One multiplier and one accumulator per neuron.
The start of a layer loads the accumulator with the bias, after which one
product x_i * w_i is added per cycle. ReLU is a comparator (`s > 0`) that steers
a 2:1 multiplexer between `s` and zero, exactly as in the paper's neuron
diagram. Output-layer neurons are the same unit without the ReLU.

**Number format.** Every stored value is a signed Q8.8 word (16 bits, 8
fractional). Products are exact (Q16.16), the bias is shifted into that scale,
the accumulator is 40 bits wide, and the neuron output is the accumulator
shifted right by 8 (rounding toward minus infinity) and saturated to 16 bits.
Weights must be quantised to Q8.8 when they are exported from training.

**Layer** (`nn_layer`, `weight_bias_mem`). All neurons of a layer work in
parallel on the same input: the layer drives an input index, receives that
input from the previous stage and the matching column of its weight memory,
and every neuron accumulates. A layer with *n* inputs finishes *n* + 1 cycles
after its start. The weight memory is read combinationally (distributed RAM),
matching the paper's report of no block RAM in the models.

**Buffers, controller, argmax** (`layer_buffer`, `nn_controller`, `argmax`).
Each layer's outputs are captured in a buffer in the cycle the layer finishes,
and the next layer reads them one per cycle. The controller starts the layers
strictly one after another. After the output layer, `argmax` picks the largest
output (first one on ties) and produces index and one-hot label. A model whose
layers have n_0 ... n_L inputs takes sum(n_l + 2) + 3 cycles; NN1 of the
vehicle set takes **75 cycles**.

**The five models** (`dnn`, sizes in `rtann_pkg::hidden_size`). Hidden-layer
sizes per dataset, from the paper:

| model | Vehicle    | Diabetes   | German Credit |
|-------|------------|------------|---------------|
| NN1   | 18, 18, 10 | 5, 3       | 7, 7          |
| NN2   | 30, 30, 20 | 3, 3       | 7, 7, 4       |
| NN3   | 27, 27, 22 | 12, 12, 8  | 4, 4          |
| NN4   | 20, 20, 15 | 8, 8, 4    | 8, 8, 4       |
| NN5   | 20, 20, 16 | 6, 4, 4    | 6, 6, 4       |

Reading the tuples as hidden-layer sizes and adding a 4-neuron output layer
reproduces the paper's DSP counts for the vehicle models exactly at two DSPs
per neuron (e.g. NN2: 30+30+20+4 = 84 neurons, 168 DSPs). That supports both
the one-multiplier-per-neuron structure and the 4-class output.

## Reconfigurable partition and the decoupler

`rtann_top` places one `dnn` in the partition; the parameter `RM_ID` (0..4)
chooses which ensemble member, so each value of `RM_ID` corresponds to one
partial bitstream of the same static design. The boundary is the
`dfx_decoupler`: control and result signals in both directions are ANDed with
`~decouple`; data buses (the input vector, weight data) pass unchanged because
nothing acts on them without a control signal. The register block latches the
model result on `done`, so a later decoupling does not erase it.

Partial reconfiguration itself cannot be simulated in RTL. The end-to-end
testbench therefore instantiates five builds (`RM_ID` 0 to 4) whose static
parts receive identical traffic. "Reconfiguring" means decoupling the build in
use and continuing on the build that holds the selected model.

## Processor interface

AXI4-Stream input: 32-bit beats, feature in bits 15:0, `TLAST` closes a frame.
A frame with other than `N_FEATURES` beats sets the length-error flag and is
not marked valid.

AXI4-Lite registers (8-bit address, 32-bit data, one transaction at a time).
An access to an address not listed, a read of a write-only register or a
write to a read-only one answers `SLVERR`, reads 0 and changes nothing;
everything else answers `OKAY`.

| addr | name        | access | content |
|------|-------------|--------|---------|
| 0x00 | CTRL        | W  | bit0 start estimator, bit1 start model (self-clearing) |
| 0x04 | STATUS      | R  | 0 est. busy, 1 est. done, 2 model busy, 3 model done, 4 vector valid, 5 length error, 6 decoupled |
| 0x08 | CE_LABEL    | R  | selected model (0 = NN1) |
| 0x0C | CE_MIN_IDX  | R  | nearest centroid |
| 0x10 | CE_DIST_LO  | R  | its squared distance, bits 31:0 |
| 0x14 | CE_DIST_HI  | R  | bits 63:32 |
| 0x18 | NN_RESULT   | R  | 7:0 class, 15:8 one-hot (latched at model done) |
| 0x1C | CENTROID_WR | W  | 31:24 centroid, 23:16 coordinate (18 = label), 15:0 value |
| 0x20 | WEIGHT_ADDR | RW | 17:16 layer (last = output layer), 15:8 neuron, 7:0 input (n_in = bias) |
| 0x24 | WEIGHT_DATA | W  | 15:0 value, stored at WEIGHT_ADDR |

Done bits are sticky and cleared by the matching start. `WSTRB` is ignored.
`AWREADY`/`WREADY` rise together one cycle after both valids, `BVALID` one cycle
later; `ARREADY` one cycle after `ARVALID`, `RVALID` one cycle later.
Assertions in `axi_lite_regs` check that the master keeps `VALID` up until it
is accepted.

## Parameters and dataset configurations

`rtann_top` parameters: `DATASET` (`DS_VEHICLE`, `DS_DIABETES`, `DS_GERMAN`,
default vehicle), `RM_ID` (default 0 = NN1) and `NUM_DM` (default 2). The
dataset sets the feature count (18 / 8 / 24), class count (4 / 2 / 2) and number
of centroids (70 / 50 / 70). Centroid counts and model sizes come from the
paper. Feature and class counts are those of the public datasets; the paper
does not state them. The default build serves the vehicle set only, because
the other sets need other model shapes and input widths; they are separate
builds of the same RTL, for example
`rtann_top #(.DATASET(DS_GERMAN), .RM_ID(1))` for German Credit model NN2.
Register fields limit a build to 256 centroids, 255 inputs per layer and
4 layers.

## Where this implementation departs from, or adds to, the paper

* **Distance module.** The prose speaks of "a multiplier" and "an accumulator"
  per module, but the block diagram draws a squarer per feature followed by a
  buffer and a sum. This RTL follows the diagram: 18 squarers per module and a
  one-cycle adder tree. With two modules that is 36 multipliers, whereas the
  paper reports 50 DSPs and 7 block RAMs for its estimator.
* **No square root.** Squared distances are compared, which selects the same
  centroid.
* **Loadable memories.** Centroids, labels, weights and biases are written by
  the processor after reset instead of being constants in the bitstream.
* **Number format**: Q8.8 with saturation; the paper gives none. Its DSP count
  of two per neuron suggests it used wider words.
* **Own choices**: the sequential comparator scan, strictly sequential layers,
  the register map, the stream format, the set of decoupled signals, tie
  rules (lowest index wins in both comparator and argmax) and asynchronous
  active-low reset.
* **Left outside the RTL**: the Zynq processing system, DDR, AXI DMA, AXI
  interconnect, GPIO and the partial-reconfiguration mechanism. They appear as
  the top's ports, and the testbenches contain bus-functional models of the
  DMA and of the processor's AXI4-Lite master. Offline training (k-means and
  the assignment of models to clusters) is software and not part of this
  design.

## Files

`rtl/`: `rtann_pkg` (types, Q-format constants, the ensemble size table,
saturation), `centroid_rom`, `distance_module`, `distances_buffer`,
`min_comparator`, `ce_control_unit`, `competence_estimator`, `hidden_neuron`,
`weight_bias_mem`, `nn_layer`, `layer_buffer`, `argmax`, `nn_controller`, `dnn`,
`dfx_decoupler`, `axis_input_buffer`, `axi_lite_regs`, `rtann_top`.

`tb/`: one self-checking testbench per module (`tb_<module>`), plus
`tb_rtann_top` (five builds, twelve instances, model swaps),
`tb_rtann_full` (one complete operation of the default build),
`tb_rtann_datasets` (diabetes and German credit builds, two models each),
reference
models in `tb_ref_pkg`, bus models `axil_master_bfm` and `axis_master_bfm`, and
helpers `tb_rtann_node`, `tb_rtann_ds_case`, `tb_dnn_case`, `tb_ce_cu_case`.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself; a
watchdog ends a hung run with a failure. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -Irtl -Itb -y rtl -y tb rtl/rtann_pkg.sv tb/tb_rtann_top.sv \
  --top-module tb_rtann_top -o sim && ./obj_dir/sim
```

Replace the testbench name for any other. The reference models in the
testbenches are written independently of the RTL: nearest centroid by 64-bit
integer search, and a Q8.8 forward pass with the same rounding and saturation
rules. The end-to-end test uses random centroids and weights, so it checks that
the hardware computes what the algorithm specifies, not the accuracies the
paper reports: those depend on trained parameters the paper does not publish.

## How far it can be trusted

All modules pass Verilator lint and the slang front end, and every testbench
passes. The system tests cover the centroid search (distance, index, label,
112-cycle latency), all five vehicle models against a reference forward pass,
two diabetes and two German credit builds (estimator and model latency
included), model swaps with the decoupler blocking a start, DMA back-pressure
while the estimator runs, and rejection of a wrong-length frame. The module
testbenches check each block's cycle timing where it has one, and the
register block's `SLVERR` answers to bad accesses. Each module testbench was
also run against a deliberately broken copy of its module and failed, as it
should. Not verified: timing closure and resource use on a real device, and
behaviour with trained parameters.
