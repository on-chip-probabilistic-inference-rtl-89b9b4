# Track parameters from one pixel layer, computed at the sensor

A charged particle crossing a thin silicon pixel sensor leaves a small
cluster of charge whose shape depends on where and at what angles the particle
came in. This design reads that cluster, digitised very coarsely, and returns
the particle's hit position (x, y), its two incidence angles (as cot α and
cot β) and an uncertainty for each, using a small neural network built
directly into the readout electronics. Instead of shipping every fired pixel
off the detector, the chip ships a fixed, short list of numbers per cluster,
every 25 ns bunch crossing.

The network is a multi-layer perceptron (MLP) trained as a mixture density
network: half of its eight outputs are means and half are standard
deviations. The RTL here implements the inference datapath, the pixel
digitisation in behavioural form, and a register file for the trained
parameters. It takes one cluster per clock cycle and delivers the result two
clock cycles later.

## Data path at a glance

```
 charge[16][16] --> 2 x 256 flash ADCs (2 bits, thresholds T0<T1<T2)
                         | strobe[0]      | strobe[1]
                     frame 0 codes    frame 1 codes        codes[2][16][16]
                         \_______________/
                                 |
                        proj_pool: sum over y -> x-projection (16 x 2)
                                   sum over x -> y-projection (16 x 2)
                                 |
           dense 32->16, ReLU  (x)          dense 32->16, ReLU (y)
                         \_______________/
                            concat (32)
                         dense 32->16, tanh            "embedding"
 ========================= pipeline register 1 ============================
                         dense 16->16, tanh
                         dense 16->16, tanh
                         dense 16->8, linear (saturating)
 ========================= pipeline register 2 ============================
                                 out[8]
```

Every layer is fully unrolled: there is one multiplier per weight, so the
whole network is evaluated in two cycles and a new cluster can enter on every
clock edge.

## The charge image

The sensor region handled by one instance is 16 × 16 pixels (pitch
50 µm × 12.5 µm in the physical sensor). Each pixel's charge is digitised to
two bits by a flash ADC: three comparators against thresholds T0 < T1 < T2
give the bin index

| charge Q          | code |
|-------------------|------|
| Q < T0            | 0    |
| T0 ≤ Q < T1       | 1    |
| T1 ≤ Q < T2       | 2    |
| Q ≥ T2            | 3    |

The thresholds are analog bias settings in silicon; here they are signed
16-bit numbers of electrons on the `thr` port. Values that suit the network
are roughly 250, 670 and 1660 electrons (the testbenches start from 248, 668
and 1663); the lowest one sits a few noise standard deviations (about 80
electrons) above zero.

The charge is sampled twice per bunch crossing, a few nanoseconds apart, so
the network also sees how the cluster grows in time. Each pixel therefore has
two ADC instances in `smartpixel_top`, one per frame, latched by
`strobe[0]` and `strobe[1]`. The code that reaches the network is the bin
index itself, 0 to 3, not a charge estimate.

`pixel_adc` is a behavioural model of that analog block (the amplifier in
front of it is folded into its `charge` input). It is plain, lint-clean
SystemVerilog, but on a real chip this part is analog circuitry.

## Projections instead of the full image

The MLP never looks at the 512 codes directly. For each frame it averages the
image along y, giving one value per x column (the x-projection), and along x,
giving one value per y row (the y-projection). This collapses 512 inputs to
2 × 32 and is what keeps the network small.

An average of 16 codes is a sum (0 to 48) divided by 16. `proj_pool` keeps the
sum and treats it as a number with four fraction bits, so the average is
exact. Projection element `p*2 + f` holds position `p` of frame `f`.

## The network and its parameter count

| layer          | inputs | outputs | activation | parameters |
|----------------|--------|---------|------------|-----------:|
| x branch       | 32     | 16      | ReLU       | 528        |
| y branch       | 32     | 16      | ReLU       | 528        |
| embedding      | 32     | 16      | tanh       | 528        |
| hidden 1       | 16     | 16      | tanh       | 272        |
| hidden 2       | 16     | 16      | tanh       | 272        |
| output         | 16     | 8       | linear     | 136        |
| **total**      |        |         |            | **2264**   |

The width of the two projection branches is not a free choice: 16 is the only
width for which this layer list has 2264 parameters with eight outputs and
2179 with three. Those are the published sizes of the "Full" (8 outputs) and
"Slim" (3 outputs: x, y, cot β) networks. Set `N_OUT = 3` on `mlp_net` or
`smartpixel_top` for the Slim network.

What each output means (which is x, which is σ_x, and how each is scaled)
is fixed by training, not by the hardware. The RTL just delivers eight
fixed-point numbers.

## Number formats and rounding

This is the part that decides whether the hardware reproduces a trained
model bit for bit, so it is spelled out in full.

* **Weights and biases** are `fixed<8,1>`: 8-bit two's complement with seven
  fraction bits, value = integer / 128, range [−1, 127/128].
* **Activations** between layers use the same format.
* **Pooled inputs** are 7-bit non-negative numbers with four fraction bits
  (0 to 3 in steps of 1/16).
* **Accumulation** is exact. `dense_layer` sums the products at full width
  (input fraction bits + 7) and adds the bias shifted left by the input's
  fraction bits. The width `in_w + 8 + clog2(n_in) + 1` cannot overflow.
* **Requantisation** (`act_q8`) drops fraction bits down to seven by an
  arithmetic right shift, which truncates toward −∞. Then:
  * ReLU: negative values become 0 and values above 127/128 saturate to 127/128;
  * tanh: the truncated value indexes a 1024-entry table covering [−4, 4) in
    steps of 1/128. Entry *i* holds round(128·tanh((*i* − 512)/128)), clipped
    to 127. Inputs beyond ±4 use the end entries. The table is computed
    during elaboration with `$tanh`, so no data file is needed.
  * linear (output layer): saturates to [−1, 127/128].

If a trained model was quantised with a different rounding mode (for
example round-to-nearest) or a different tanh table, change `act_q8`: every
layer calls it.

## Timing

* `mlp_net` samples `codes` at the rising clock edge where `in_valid` is high.
  The embedding is registered at that edge and the outputs at the next one,
  so a downstream register sees `out_valid` and `out` at the second rising
  edge after the sampling edge: latency 2, initiation interval 1. Pipeline register 1 holds the 16-value
  embedding. Register 2 holds the outputs.
* In `smartpixel_top` both strobes must come before that edge. The codes then
  stay put until the next strobe. The strobes are assumed to come from timing
  that is in step with the clock, so no synchroniser is used. Physically the
  two samples are about 3.8 ns apart in a 25 ns bunch crossing.
* Reset (`rst_n`, active low, asynchronous) clears the ADC codes, the valid
  bits, the pipeline registers and all parameters.

## Loading the trained parameters

The network's 2264 parameters sit in `weight_store`, a register file whose
every word feeds the datapath at once. Parameters are written one per clock
cycle through `cfg_we`, `cfg_addr` (12 bits) and `cfg_wdata`. Addresses at or
above 2264 are ignored. Do not write while the results of clusters in flight
are still wanted. An assertion in `smartpixel_top` reports a write in the
same cycle as `in_valid`.

Layout (for `N_OUT = 8`): each layer stores its weights in [output][input]
order, then its biases.

| layer     | weights       | biases        |
|-----------|---------------|---------------|
| x branch  | 0 – 511       | 512 – 527     |
| y branch  | 528 – 1039    | 1040 – 1055   |
| embedding | 1056 – 1567   | 1568 – 1583   |
| hidden 1  | 1584 – 1839   | 1840 – 1855   |
| hidden 2  | 1856 – 2111   | 2112 – 2127   |
| output    | 2128 – 2255   | 2256 – 2263   |

Input index *i* of the x branch is projection element *i* (`x*2 + frame`). In
the embedding layer, inputs 0–15 come from the x branch and 16–31 from the
y branch. The functions in `smartpix_pkg` compute these offsets for any
output count.

Loadable registers make the RTL serve any training. A chip built for one
fixed model would instead fold the constants into the multipliers, which
makes them far smaller. Expect this RTL, with 2264 general 8 × 8 multipliers,
to be much larger than such a constant-weight implementation.

## How this RTL relates to the architecture it implements

Taken from the architecture: the 16 × 16 × 2 input of two-bit codes and its
binning rule; the projections by averaging; the layer sequence, widths and
activations; the `fixed<8,1>` format of weights, biases and activations; the
output counts 8 and 3; the parameter counts; the two-cycle latency with a new
cluster every cycle.

Choices made here, where the architecture leaves the details open:

* The branch width 16, inferred from the parameter count as shown above.
* The output layer is linear. One drawing of the architecture shows a tanh
  after the last dense layer, but the written description calls it linear;
  the linear version is built. Either way the output is limited to
  [−1, 127/128] by the 8-bit format.
* The drawing shows three dense layers after the concatenation, while the
  written description (and the parameter count) needs four. Four are built.
* Truncating requantisation with saturation, the tanh table, exact
  pooling and exact accumulation.
* The place of the two pipeline registers.
* The parameter register file and its write port, the parameter order, and
  the x-before-y order of the concatenation.
* The strobe interface of the ADCs, electrons as the unit of charge and
  thresholds, and the ADC reset value.

Not built:

* The convolutional variants of the network, which appear only for
  comparison. They use 4-bit convolution weights and different front ends.
* The analog parts: charge amplifiers, the threshold bias network, and the
  ADCs themselves (only modelled).
* Off-chip readout of the results. Sizing studies assume a 16-bit word per
  cluster, but no encoding from the eight outputs to such a word is defined.

## Files

| file | contents |
|------|----------|
| `rtl/smartpix_pkg.sv`    | sizes, formats, activation kinds, parameter-layout functions |
| `rtl/pixel_adc.sv`       | behavioural two-bit flash ADC of one pixel and frame |
| `rtl/proj_pool.sv`       | x and y projections of the code image |
| `rtl/dense_layer.sv`     | fully unrolled dense layer, exact accumulator |
| `rtl/act_q8.sv`          | ReLU / tanh / linear with requantisation to `fixed<8,1>` |
| `rtl/weight_store.sv`    | parameter register file with write port |
| `rtl/mlp_net.sv`         | the network, two pipeline stages |
| `rtl/smartpixel_top.sv`  | ADC array + parameter store + network |
| `tb/mlp_ref_pkg.sv`      | independent arithmetic model of the network for the testbenches |
| `tb/tb_*.sv`             | one self-checking testbench per module |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself.
Each has a watchdog that counts a failure if the run hangs. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/smartpix_pkg.sv tb/mlp_ref_pkg.sv tb/tb_smartpixel_top.sv \
    --top-module tb_smartpixel_top -o sim
./obj_dir/sim
```

Replace `tb_smartpixel_top` with any other `tb_<module>`. Verilator finds
the other modules in `rtl/` through `-Irtl`. Building the top-level or network
testbench takes about 20 s, and the simulation itself takes under a second.

What the testbenches check:

* `tb_pixel_adc`: charges on, just below and just above each threshold, with
  fixed and random thresholds; the code holds between strobes and clears on
  reset; all four codes appear.
* `tb_proj_pool`: empty, full, single-pixel and random images.
* `tb_dense_layer`: both layer shapes used by the network, with random values
  and values at the format extremes.
* `tb_act_q8`: a sweep over the whole tanh table and past it, plus the
  points around every cut, for all three activation kinds.
* `tb_weight_store`: a full load twice; writes take effect only at the clock
  edge; disabled and out-of-range writes; reset.
* `tb_mlp_net`: four parameter sets from gentle to fully saturating and
  about 420 random clusters, many on consecutive cycles. Every output is
  compared with the reference model, and `out_valid` must follow `in_valid`
  by exactly two edges. The run must reach every saturating corner of ReLU,
  tanh and the linear output.
* `tb_mlp_net_slim`: the same test for the Slim network (`N_OUT = 3`,
  2179 parameters).
* `tb_smartpixel_top`: the whole chip at its default size. Parameters are
  written through the configuration port three times. About 130 clusters
  are sent: noisy track footprints sampled in two frames 3.8 ns apart on a 25 ns
  clock, with back-to-back
  clusters and a change of thresholds. The testbench counts every mechanism
  above (all ADC codes, all activation corners, consecutive clusters,
  reloads, threshold change) and fails if one never occurs.

The reference model (`tb/mlp_ref_pkg.sv`) is written separately from the RTL.
It uses integer and real arithmetic, `$floor` for truncation and `$tanh`
directly, so it checks the table, the shifts and the saturation logic rather
than repeating them.
