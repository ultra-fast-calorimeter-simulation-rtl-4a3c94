# A streaming fixed-point decoder for fast calorimeter-shower generation

Full simulation of how a particle's energy spreads through a calorimeter
("showers") is expensive. A cheaper option is a generative neural network. This
design is one such network: the decoder half of a conditional variational
autoencoder (cVAE), built as RTL that streams one value per clock.

The decoder takes two inputs: 30 latent values drawn from a standard normal,
and one condition, the photon's incident energy encoded as
`x_con = log2(E_inc / MeV) / 22`. From these it produces one shower: 374
numbers describing how the energy is spread over a 5-layer calorimeter
(8, 160, 190, 5 and 5 voxels). No batching is needed. Showers are generated
one at a time with a fixed latency, and successive showers overlap in the
pipeline.

The network structure, the calorimeter geometry and the per-layer number
formats follow a published FPGA design that compiled the same model with a
high-level-synthesis flow (hls4ml). The following are choices made for this
RTL, not taken from that description: the four hidden-layer widths, the
stream protocol, the table-based softmax/sigmoid method and the run-time
parameter-load bus. The section "What is assumed" lists them one by one.

## Data flow

```
 z (30) ──┐
          ├─ concat ─► 31 ─► [dense─BN─LReLU] ─► 32 ─► [dense─BN─LReLU] ─► 48
 x_con ───┘                ─► [dense─BN─LReLU] ─► 64 ─► [dense─BN─LReLU] ─► 100
                           ─► dense ─► 374 ─┬─► dense 374→8   ─► softmax ─┐ voxels, layer 0
                                            ├─► dense 374→160 ─► softmax ─┤ voxels, layer 1
                                            ├─► dense 374→190 ─► softmax ─┤ voxels, layer 2
                                            ├─► dense 374→5   ─► softmax ─┤ voxels, layer 3
                                            ├─► dense 374→5   ─► softmax ─┤ voxels, layer 4
                                            ├─► dense 374→1   ─► sigmoid ─┤ energy response r
                                            └─► dense 374→5   ─► softmax ─┘ layer energy ratios
                                                                     concat ─► x̃ (374)
```

The output vector `x̃` has three parts:

* Elements 0–367 are voxel energy ratios. Within each calorimeter layer they sum
  to one, so the voxel energy is `E_i = v_i · L_layer`.
* Element 368 is the energy response `r`, with `E_tot = r · ζ · E_inc`.
  `ζ` is a normalisation constant of the training data.
* Elements 369–373 are the layer fractions `ℓ_l = L_l / E_tot`.

Turning these ratios back into energies is done in software, outside this
design.

| file | role |
|---|---|
| `rtl/calo_pkg.sv` | number formats, sizes, load-bus layout, `fx_cast` rounding helper |
| `rtl/dense_lane.sv` | one neuron: weight RAM, multiplier, accumulator |
| `rtl/dense_stream.sv` | dense layer: `N_OUT` lanes plus stream control |
| `rtl/batchnorm_stream.sv` | folded batch normalisation |
| `rtl/leaky_relu_stream.sv` | leaky ReLU |
| `rtl/softmax_stream.sv` | table-based softmax |
| `rtl/sigmoid_stream.sv` | table-based sigmoid |
| `rtl/stream_concat.sv` | joins streams in a fixed order |
| `rtl/calo_decoder.sv` | top level |

## Number formats

All values are signed two's-complement fixed-point numbers. They are written
`<W,I>`: W bits in total, I of them integer bits (the sign included), so
F = W − I fractional bits. Every narrowing conversion rounds to nearest with
ties to even ("convergent" rounding). It saturates at the ends of the range
instead of wrapping. `calo_pkg::fx_cast(v, fi, wo, fo)` does this conversion
everywhere. The formats are those given for the FPGA implementation:

| where | input / result | weight | bias | product | accumulator |
|---|---|---|---|---|---|
| hidden dense layers, the 374-wide layer, the five voxel branches | <16,6> | <6,2> | <8,3> | <18,8> | <20,8> |
| branch feeding the layer-energy softmax | <16,6> | <8,3> | <10,3> | <20,8> | <28,12> |
| branch feeding the energy-response sigmoid | <16,6> in, <42,22> out | <16,6> | <16,6> | exact (32 bits) | <42,22> |
| batch norm (folded) | <16,6> | scale <20,8> | bias <20,8> | <18,8> | – |
| leaky ReLU | <16,6> | slope <12,6> | | | |
| softmax | <16,6> | tables <18,8> | | | sum <20,8> |
| sigmoid | <42,22> in, <16,6> out | table <18,8> | | | |

A dense neuron computes its sum in this order:

1. Start from the bias.
2. For each input element in index order, round the product `x_k · w_kj` to
   the product format and add it with saturation.
3. Round the final sum to the result format.

Because saturation happens at every step, the order matters when a sum
saturates. The testbench reference (`tb/calo_ref_pkg.sv`) uses the same order.
It is written independently with real arithmetic, and it is bit exact.

## The dense layer: one multiplier per neuron

The network was compiled with a reuse factor equal to each layer's input
width. That means every multiplier is used once per input element, and a layer
has as many multipliers as outputs. `dense_stream` builds exactly that:

* Each input element that arrives is sent to all `N_OUT` lanes.
* Each lane (`dense_lane`) reads its weight for that element from a private
  RAM of depth `N_IN`, then multiplies and accumulates.
* After the last element, all sums move in one cycle into output registers.
* The results then leave one per cycle while the lanes already accumulate the
  next vector.

Timing of one layer:

* A layer accepts one element per cycle.
* It spends `N_IN + 2` cycles per vector on its input: two bubble cycles at
  each vector boundary.
* Its first result appears 3 cycles after the last input element.

If the output registers are still being drained when the next sum is ready, the
input stalls.

The whole decoder therefore has 32 + 48 + 64 + 100 + 374 + 374 = 992
multipliers. The original flow removed multipliers whose trained weight was
zero (85 % of them after pruning), because it compiled the weights in as
constants. Here the weights are loaded at run time, so every weight has storage
and no multiplier is removed.

## Softmax and sigmoid tables

`softmax_stream` works on one whole vector in three passes over a local
buffer:

1. **load** — take in the N values and track their maximum.
2. **exp** — for each value, form `d = x − max`. This is ≤ 0 and saturated to
   ≥ −32. Look up `exp(d)` in a 1024-entry table addressed by the top ten bits
   of `d`, so the table step is 1/16. Store the result and add it to a <20,8>
   sum.
3. **inverse and output** — look up `1/sum` in a second 1024-entry table,
   addressed by the top ten bits of the sum in <18,8>, so the step is 1/4. Then
   stream out `exp(d_i) · (1/sum)` rounded to <16,6>.

Both tables are computed at elaboration with `$exp`. No table files are
needed. The coarse reciprocal step is the most visible approximation: a sum of
1.2 is inverted as 1/1.0. As a result the outputs of one calorimeter layer sum
to one only to within 25 %: a sum just under 1.25 is also inverted as 1/1.0.
The step follows the usual layout of table-based softmax in fixed-point
network hardware. To change it, look in `mk_inv` and the `sum_tab` addressing.

`sigmoid_stream` maps its <42,22> input to a table address with
`clamp(floor(64·x) + 512, 0, 1023)`. The table holds
`1 / (1 + exp(−(a − 512)/64))`, so it covers [−8, 8) in steps of 1/64.

## Timing of a whole shower

The figures below assume the inputs arrive without gaps and the output is
never stalled. All times are counted from the cycle the first latent value is
accepted:

| event | cycle |
|---|---|
| last input element (x_con) accepted by the first layer | 30 |
| first result of the 100→374 layer | 293 |
| branch layers have their results | 669 |
| first output element (layer-0 voxel softmax) | **686** |
| layer-1 voxels (160) stream | 990 – 1149 |
| layer-2 voxels (190) stream | 1150 – 1339 |
| last output element | **1355** |

Each hidden stage delays the stream by its input width plus 4 cycles. The
last element is accepted N_IN − 1 cycles after the first, its result appears
3 cycles later, and batch norm and leaky ReLU add one cycle each. The branch
layers then read all 374 elements, and their results appear 3 cycles after the
last one. From there on, the 190-voxel softmax is the longest path: its load,
exp and reciprocal passes take 2·190 + 1 cycles. The output joiner sends the
branches strictly in order, which serialises the 374 results.

Successive showers overlap in the pipeline. A softmax block accepts a new
vector only after it has sent the previous one. Throughput is therefore at
most one shower per 3·190 + 1 = 571 cycles, set by the 190-voxel softmax. The
end-to-end test checks both latency numbers and has up to five showers in
flight.

The clock frequency is not part of this description. At 200 MHz a shower takes
6.8 µs from first input to last output. The published implementation reported
12.3 ± 4.6 µs, at a clock it did not state.

## Loading the parameters

No weights come with the design. Trained parameters are written through the
`cfg` port, a packed struct `calo_pkg::cfg_t` with these fields:

* `we` — write enable.
* `id` — layer identifier, 4 bits.
* `row` and `col` — 9 bits each.
* `data` — 42 bits: the raw fixed-point word, right-aligned. Upper bits are
  ignored.

One word is written per cycle with `we` high.

| id | layer | row | col |
|---|---|---|---|
| 0–3 | hidden dense 1–4 | input index k, or `N_IN` for the bias | neuron |
| 4 | dense 100→374 | k (0–99) or 100 for the bias | neuron |
| 5–8 | batch norm 1–4 | 0 = scale, 1 = bias | channel |
| 9–13 | voxel branches, layers 0–4 | k (0–373) or 374 for the bias | neuron |
| 14 | energy-response branch | k, or 374 for the bias | 0 |
| 15 | layer-energy branch | k, or 374 for the bias | neuron |

Batch normalisation must be folded before loading. For each channel:

* `scale = γ / √(σ² + ε)`
* `bias = β − μ · scale`

Each value is then rounded to <20,8>. Write all parameters before sending
showers. The weight RAMs are not reset.

## Interface of `calo_decoder`

* `clk`, `rst_n`: clock and asynchronous active-low reset.
* `z_valid/z_ready/z_data`: 30 latent values per shower, in <16,6>.
* `c_valid/c_ready/c_data`: 1 condition per shower, in <16,6>. The decoder
  takes all 30 `z` values of a shower first, then its `x_con`.
* `x_valid/x_ready/x_data/x_last`: 374 output values per shower, in <16,6>.
  `x_last` is high on the last one.

All streams are valid/ready. A transfer happens on a clock edge where both are
high. Outputs hold steady while stalled, and every stage accepts back-pressure.

## What is assumed

These points are not fixed by the published description. They are this
design's choices:

* **Hidden widths 32/48/64/100.** Only "four dense layers of increasing
  width" is known. With a mirrored encoder, these widths give a total VAE
  parameter count within 3 % of the published 234,884.
* **The 374-wide layer has no normalisation or activation.** None is mentioned
  for it.
* **Input order is `z` before `x_con`.** The output order (voxels, response,
  layer ratios) is given.
* **Streams carry one element per beat.**
* **Parameters are loaded at run time** instead of being compiled into logic.
  This is why pruned weights do not save multipliers here.
* **Leaky ReLU slope is 19/64.** This is the <12,6> value nearest 0.3. The
  trained slope is not known; change it with the `ALPHA` parameter.
* **Table sizes and ranges.** The softmax and sigmoid tables have 1024 entries
  each, with the addressing described above.
* **The whole design is deterministic.** The published latency had a spread,
  which this design does not reproduce.

Not part of this RTL:

* Drawing the Gaussian latent values.
* The host link that carries conditions in and showers out.
* The encoder, which is needed only for training.
* Pre- and post-processing of the energies.

## Simulating

Each block has a self-checking testbench in `tb/`. Each one ends with the line
`TB_RESULT checks=N failures=M`. The shared reference models are in
`tb/calo_ref_pkg.sv`. With Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/calo_pkg.sv tb/calo_ref_pkg.sv \
          tb/tb_calo_decoder.sv --top-module tb_calo_decoder -o sim
./obj_dir/sim
```

Replace `tb_calo_decoder` with `tb_dense_stream`, `tb_batchnorm_stream`,
`tb_leaky_relu_stream`, `tb_softmax_stream`, `tb_sigmoid_stream` or
`tb_stream_concat` to run the unit tests.

`tb_calo_decoder` runs the decoder at its full default size, in these steps:

1. Load about 190,000 random parameters, 85 % of the dense weights zero.
2. Run one shower alone and check the 686/1355-cycle latency.
3. Run five more showers back to back with random output stalls.
4. Compare every output element bit for bit with the reference.

It also counts overlapping showers, input stalls and output back-pressure, and
fails if any of them never happened. Building takes about two minutes;
simulating takes a few seconds.

`tb_photon_energies` covers the whole photon energy range, also at full size.
It generates one shower for each incident energy 2^8 .. 2^22 MeV, back to back
with output stalls. It compares every element bit for bit with the reference,
as above. It also checks properties that hold whatever the weights:

* Every output lies in [0, 1].
* Within each calorimeter layer the voxel ratios sum to about one.
* The five layer ratios sum to about one.

"About one" means between 0.75 and 1.3. That bound is wide because of the
coarse reciprocal table.

The unit tests do the following:

* Drive random data with random gaps and stalls.
* Cover saturation and rounding edge cases.
* Check each block's cycle timing: one element per cycle, latencies, and the
  softmax's 3N+1-cycle period.
