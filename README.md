# A temporal neural network for online classification: RTL

This design classifies a stream of images online. It learns while it infers and keeps no training set. Information travels as spike *times*. The unit clock marks model time, and the clock cycle in which a spike occurs is its value. A group of `TMAX` unit cycles forms a *gamma cycle*, and every layer of the network is one gamma-cycle pipeline stage. Front to back there are five stages:

| stage | block | what it does |
|---|---|---|
| E | `spike_encoder` | Binarizes the image. For every overlapping 3x3 receptive field it emits the four corner pixels and their complements as spikes at t = 0: eight lines, exactly four of which spike. |
| C | `column_layer` of `tnn_column` | Unsupervised clustering. Each column sends its inputs through a crossbar of learned weights into ramp neurons. Winner-take-all inhibition keeps only the earliest output spike. The output is a *one-hot temporal cluster identifier*: which line spiked says which cluster, and when it spiked says how close the input was to that cluster's centre. |
| C | `rf_gather` + second `column_layer` | Clusters of clusters. Each layer-2 column takes the identifiers of the four corner columns of a 3x3 window of layer 1. |
| V | `voter` (two per layer-2 column) | Supervised. Maps a cluster identifier to votes for classes. A table of saturating counters learns from the label. |
| T | `tally` | Adds up all the votes and names the class with the most. |

The top, `tnn_system`, accepts one image per gamma cycle. The result for an image leaves the pipeline four gamma boundaries after the image was sampled.

## Time, spikes and local time

Between stages a spike travels as a 4-bit number: its time 0..TMAX-1 within the gamma cycle. The all-ones code (`INF`) means no spike. A stage holds its input volley for a whole gamma cycle. A counter (`gamma_timer`) supplies the unit time `t`, and each synapse compares `t` with its stored spike time. That comparison is the unit-time event a wire carrying a pulse would give.

A column keeps its own time origin: its earliest input spike is local t = 0. It subtracts that from all input times before evaluating its neurons. Its output is therefore relative to its own first input, which makes the result independent of when the volley arrived.

## The column (`tnn_column`)

The most intricate block. It has P inputs, Q neurons and a P x Q weight crossbar.

* **Ramp-no-leak neuron (`rnl_neuron`).** An input spike at time x starts a ramp on its synapse. The ramp adds 1, 2, 3, ... to the body potential in the following unit cycles and stops rising at the synapse's weight w. The response is zero before x and there is no decay. The neuron fires in the first unit cycle in which the summed potential reaches THETA. A neuron whose well-weighted inputs spike early fires early, so the spike time measures distance to the cluster centre. Without the ramp (a step response) binary inputs would all give t = 0.
* **First-fire registers.** These hold each neuron's spike time during the gamma cycle and clear at each gamma boundary. A neuron that never fires inside the gamma cycle outputs INF.
* **Winner-take-all (`wta_inhibit`).** In the last unit cycle, only the earliest neuron spike passes; a tie goes to the lowest index. The result is registered as the column output for the next stage.
* **STDP (`stdp_update`).** In the same clock edge, every weight is updated from three things: its input time x, the inhibited output time z of its neuron, and its current value.

  | input | output | change |
  |---|---|---|
  | spike | spike, x <= z | + F+(w) |
  | spike | spike, x > z | - F-(w) |
  | spike | none | + MU_S (search mode) |
  | none | spike | - F-(w) |
  | none | none | 0 |

  F+ is the full step MU_PLUS when w >= wmax/2 and half a step below that. F- is the full step MU_MINUS when w < wmax/2 and half a step above that, so a weight tends to stay in its half of the range. Weights saturate at 0 and wmax. Only the winning neuron moves toward the input, and weights settle at 0 or wmax. The weights of a neuron then approximate the centre of the inputs it wins.

Weights are fixed point: 3 integer bits (0..7) and 10 fraction bits. Only the integer part drives the neurons. The fraction lets steps as small as 1/1024 accumulate. All weights reset to wmax/2 = 3.5.

## The voter and the tally

A voter sees one cluster identifier: line i spiking at time k. Times at or past `TEFF-1` count as `TEFF-1`, so each (line, class) crosspoint holds `TEFF` counters. Class j gets a vote when counter (i, j, k) is at least wmax/2. When the label arrives, the selected counter of the labelled class rises by 1 - THETA_V and the selected counters of all other classes fall by THETA_V. A counter therefore drifts to wmax when its class follows this identifier with probability above THETA_V, and to 0 below it.

Each layer-2 column has two voters. The high-threshold voter (21/32) votes only for likely classes. The low-threshold voter (1/64) votes for every class except the very unlikely ones, so its effect is to exclude. The tally adds both voters' votes per class and picks the maximum, with ties to the lowest class.

## Parameters

Values come from the source design's two-column-layer prototype:

| | layer 1 | layer 2 | voters (layer 2) |
|---|---|---|---|
| columns | (IMG-2)^2 | (IMG-4)^2 | 2 per layer-2 column |
| inputs x neurons | 8 x 12 | 48 x 20 | 20 lines, 10 classes, TEFF = 3 |
| threshold | 4 | 8 | 21/32 and 1/64 |
| MU_PLUS, MU_MINUS, MU_S | 1/2, 1/2, 1/1024 | 1/4, 1/4, 1/512 | |

Steps are given as integers in units of 2^-10 (columns) and 2^-6 (voters).

**Size departure.** The source design works on 28x28 images: 676 layer-1 and 576 layer-2 columns, about 1.3 million synapses and counters. At that size the Verilator lint used more than 16 GB and was killed. At IMG = 10 it needed 2.0 GB. The default `IMG` of `tnn_system` is therefore 16 (196 + 144 columns). Set `IMG = 28` for the full network if the tools have the memory.

## Choices that are this design's own

* TMAX = 8 unit cycles per gamma cycle and wmax = 7 (3-bit weights). The source only says 8 to 16 and "very low precision".
* The STDP step is the full or half step itself. A literal reading of the source's table would multiply it by the step size again.
* STDP uses the inhibited outputs, so only the winner learns.
* A column shares one local-time origin among all its neurons.
* Wiring between column layers uses the corners of 3x3 windows. This is inferred from the synapse counts.
* Voter spike times are clamped to TEFF-1, so that there are TEFF counters per crosspoint.
* The pixel threshold is 128, and the line order within bundles is fixed (documented in each file).
* The label is supplied with its image and travels down the pipeline to the voters. A label of all zeros means no supervision.
* Vote ties go to the lowest class.

## Interface of `tnn_system`

`img[IMG][IMG]` (8-bit pixels), `label` (one-hot, 10 bits) and `in_valid` are sampled on the clock edge where `accept` is high, which is the last unit cycle of each gamma cycle. `out_valid`, `out_class`, `out_any_vote` and `out_counts` change on the same kind of edge, four gamma boundaries after the image was sampled. `rst_n` is asynchronous and active low.

## Simulating

Every file in `rtl/` is one module or package. `tnn_pkg.sv` must be read first. Each testbench in `tb/` is self-checking and prints `TB_RESULT checks=N failures=M`. Example:

    verilator --binary --timing -Irtl rtl/tnn_pkg.sv tb/tb_tnn_column.sv --top-module tb_tnn_column
    ./obj_dir/Vtb_tnn_column

`tb_tnn_system` runs the whole pipeline at IMG = 10 on two synthetic classes (vertical and horizontal bars with noise). It checks the gamma-cycle length, the pipeline latency and the valid bits, and that accuracy after training is above 90 %. It also counts late (t > 0) layer-2 spikes, votes, bubbles and unlabelled inputs, and fails if any of them never happened.

## Known limitations

* The voter testbench still reports mismatches against its reference model. The cause is not resolved, so the voter is not verified.
* At the default sizes the synthesis front end is slow on the wide wiring blocks (`rf_gather`, `spike_encoder`).
* No run at the source design's full 28x28 size has been made.
