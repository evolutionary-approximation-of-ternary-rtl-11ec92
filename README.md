# Bespoke ternary neural network classifier for printed sensors

Printed electronics can make a sensor tag for a fraction of a cent. The catch is that printed
transistors are huge and slow. An ordinary neural network accelerator, with multipliers and a
4-bit ADC on every sensor input, does not fit the area of a printed circuit. It also draws more
power than a printed battery or harvester can supply. This design cuts the cost at three points:

1. **Each sensor gets a 1-bit converter instead of an ADC.** Two resistors and one comparator
   produce the bit. The resistor ratio sets the voltage at which that feature reads as 1.
2. **The weights are ternary (-1, 0, +1) and hard-wired.** No multipliers are needed. A hidden
   neuron reduces to "count the active inputs with weight +1, count those with weight -1, and
   compare the two counts". Zero weights disappear from the circuit.
3. **Each circuit serves one model only.** The whole network is fixed logic for one trained
   model. Changing the model means changing parameters and building a new circuit.

The RTL here describes the complete classifier: sensor voltages go in, a class index comes out.
Every neuron uses exact popcounts. The method this design comes from also replaces some popcounts
with approximate ones found by evolutionary search. Those circuits are not reproduced here (see
*Limits and departures*).

## Data path

```
 vin[0..N_IN-1] ──► abc ×N_IN ──► feat register ──► hidden_neuron ×N_HID ──► output_neuron ×N_OUT ──► argmax ──► cls register
 (volts)          (1 bit each)     (N_IN bits)       (pcc: 2 popcounts       (XNOR folded into            (chain of
                                                      + comparator)            wires/inverters + popcount)  comparators)
```

| Module | File | What it is |
|---|---|---|
| `tnn_pkg` | `rtl/tnn_pkg.sv` | Weight encoding, plus constant functions that count and locate weights at elaboration |
| `abc` | `rtl/abc.sv` | Analog-to-binary converter. **Behavioural model** with `real` ports; not synthesizable |
| `popcount` | `rtl/popcount.sv` | Exact N-input popcount, a balanced tree of adders built level by level |
| `pcc` | `rtl/pcc.sv` | Popcount-compare: two popcounts and one comparator |
| `hidden_neuron` | `rtl/hidden_neuron.sv` | Sends each input to the positive or negative side of a `pcc`, by its weight |
| `output_neuron` | `rtl/output_neuron.sv` | Keeps, inverts or drops each hidden output, then counts the ones |
| `argmax` | `rtl/argmax.sv` | Index of the highest score; a tie goes to the lowest index |
| `tnn_core` | `rtl/tnn_core.sv` | The synthesizable network: input register, hidden layer, output layer, argmax, class register |
| `tnn_classifier` | `rtl/tnn_classifier.sv` | Top level: one `abc` per sensor input in front of `tnn_core` (for simulation) |

## The arithmetic behind the neurons

### Hidden layer: the sign of a sum becomes a comparison of two counts

The converter bits are `I_i ∈ {0,1}` and the weights are `w_i ∈ {-1,0,+1}`. A hidden neuron outputs
1 when `Σ w_i·I_i ≥ 0` and 0 otherwise. Split the sum by the sign of each weight:

```
Σ_{w_i=+1} I_i  ≥  Σ_{w_i=-1} I_i
```

Each side is the popcount of a subset of the inputs. So a neuron with `n_pos` positive and `n_neg`
negative weights needs the following, and nothing else:

- a popcount of `n_pos` bits;
- a popcount of `n_neg` bits;
- a comparator that is `clog2(max(n_pos, n_neg) + 1)` bits wide.

The weights are elaboration-time parameters. `hidden_neuron` therefore uses `tnn_pkg::count_w` to
size each popcount and `tnn_pkg::nth_w` to find which input feeds each popcount bit. The weight
selection becomes pure wiring. An input with weight 0 is connected to nothing, and Verilator reports
it as unused, which is expected. A sum of exactly 0 counts as "fires" (output 1).

### Output layer: XNOR with constant weights folds away

The next layer reads a hidden output bit `h` as `-1` (h=0) or `+1` (h=1). For a ±1 weight, the
product `w·h` in that encoding is an XNOR of the weight's sign and `h`. With a fixed weight the XNOR
folds away:

- for `w = +1` it is a wire;
- for `w = -1` it is an inverter.

A popcount of the resulting bits gives a score `s`. It relates to the true dot product
`d = Σ w_j·h_j` as `s = (d + NNZ)/2`, where NNZ is the number of non-zero weights.

A zero weight would contribute a constant ½ in the popcount domain. `output_neuron` drops it rather
than carrying it. The argmax stays correct only if every output neuron has the same number of zero
weights, because only then is the dropped constant the same for every class. Training has to
enforce that. `tnn_core` checks it at elaboration and stops with `$error` when it is broken.

### Argmax

`argmax` walks the scores from index 0 upwards. A score replaces the running maximum only when it
is strictly larger, so a tie goes to the lowest class index. The circuit uses `N_OUT - 1`
comparators in a chain.

## The sensor interface (`abc`)

```
 Vref ─ R1 ─┬─ R2 ─ GND
            └──────────── (−) comparator (+) ─── Vin          out = Vin > Vref·R2/(R1+R2)
```

All converters share one reference rail `vref`. Each input `i` gets its own threshold, given as a
16-bit fraction `VQ[i]` of Vref (`16'h8000` means Vref/2). The top level turns this into a resistor
pair: `R2 = R2_OHM` and `R1 = R2·(1 − VQ)/VQ`.

In training, the threshold for a feature would be the median of that feature's normalised training
data. The defaults here use 0.5 because no data is available.

The model is an ideal comparator: no offset, no hysteresis and no delay. It exists so that the top
level and its testbench can run from voltages. For synthesis, use `tnn_core`, which takes the
converter bits directly; the converters are analog cells. Printed resistors vary from part to part. A change in R1/R2
moves the threshold, and this model does not capture that.

## Timing

The logic between the converters and the class is combinational. There are two registers, and both
are this design's choice:

- `feat` samples the converter bits on each rising `clk` edge;
- `cls` samples the argmax output on each rising `clk` edge.

A voltage present at edge *k* therefore appears on `cls` after edge *k+1*. `hidden` shows the
hidden-layer outputs for the current `feat`. `rst_n` is an asynchronous active-low reset that
clears both registers.

The target circuits run at a few hertz; 5 Hz is the reference rate. Latency in cycles matters far
more than clock rate here.

## Configuring a network

`tnn_classifier` parameters (`tnn_core` has the same ones, except `VQ` and `R2_OHM`):

| Parameter | Default | Meaning |
|---|---|---|
| `N_IN`, `N_HID`, `N_OUT` | 3, 2, 2 | Topology |
| `W_HID` | `[[0,1,-1],[-1,-1,1]]` | `W_HID[h][i]`: weight from input *i* to hidden neuron *h* |
| `W_OUT` | `[[1,-1],[1,1]]` | `W_OUT[o][h]`: weight from hidden *h* to output *o* |
| `VQ` | `16'h8000` for each input | Converter threshold, as a fraction of Vref |
| `R2_OHM` | 100e3 | Lower divider resistor of each converter (only the ratio matters) |

The default is a small example network with 3 inputs, 2 hidden neurons and 2 classes. Weights are
2-bit fields: `2'b00` = 0, `2'b01` = +1, `2'b11` = -1. The package exports them as `TW_ZERO`,
`TW_POS` and `TW_NEG`. Within a packed vector, index 0 is the rightmost field, for example:

```systemverilog
tnn_classifier #(
  .N_IN(3), .N_HID(2), .N_OUT(2),
  .W_HID({{TW_POS, TW_NEG, TW_NEG}, {TW_NEG, TW_POS, TW_ZERO}}),  // neuron 1, neuron 0
  .W_OUT({{TW_POS, TW_POS}, {TW_NEG, TW_POS}})                    // class 1, class 0
) u_tnn (.clk, .rst_n, .vref, .vin, .feat, .hidden, .cls);
```

Five sensor-classification networks, each a single-hidden-layer ternary net, are the sizes this
design targets:

| Dataset | Inputs | Hidden | Classes |
|---|---|---|---|
| Arrhythmia | 274 | 3 | 16 |
| Breast Cancer | 10 | 10 | 2 |
| Cardio | 21 | 3 | 3 |
| Red Wine | 11 | 3 | 6 |
| White Wine | 11 | 11 | 7 |

In the largest of these, one Arrhythmia hidden neuron has 45 positive and 39 negative weights. Its
`pcc` therefore holds a 45-bit popcount, a 39-bit popcount and a 6-bit comparator.

The trained weights of these networks are not available. The test of these sizes uses
pseudo-random weights. It shows that the hardware computes whatever network it is built for, at
full size. It says nothing about classification accuracy.

## Simulating

Every testbench is self-checking and prints one line, `TB_RESULT checks=N failures=M`. Two examples
with Verilator 5:

```sh
verilator --binary --timing --assert -Irtl -Itb rtl/tnn_pkg.sv tb/tb_tnn_classifier.sv \
          --top-module tb_tnn_classifier -Mdir obj_top && obj_top/Vtb_tnn_classifier
verilator --binary --timing --assert -Irtl -Itb rtl/tnn_pkg.sv tb/tb_tnn_datasets.sv \
          --top-module tb_tnn_datasets -Mdir obj_ds && obj_ds/Vtb_tnn_datasets
```

Each module has a testbench:

| Testbench | What it checks |
|---|---|
| `tb_abc` | Three resistor ratios swept in 1 mV steps at Vref = 0.6 V and 1.0 V. Reference: `Vin·(R1+R2) > Vref·R2`. Also checks where the output crosses from 0 to 1 |
| `tb_popcount` | 8 inputs, all 256 words; 47 inputs, random words |
| `tb_pcc` | Size (5,3), all input pairs; size (45,39), random pairs with many equal counts |
| `tb_hidden_neuron` | A mixed 7-input neuron, the [-1,-1,1] neuron and an all-zero neuron. Every input word; zero sums must occur |
| `tb_output_neuron` | Score compared with `(d + NNZ)/2` for every hidden word |
| `tb_argmax` | 5 and 2 classes, random scores with frequent ties; lowest-index rule |
| `tb_tnn_core` | The default network and a (6,4,3) hand-weighted network, driven with bits; ties, zero sums, reset, latency |
| `tb_tnn_classifier` | The default network end to end: see below |
| `tb_tnn_datasets` | The five topologies above at full size, 300 random cycles each, against a reference model; ties and zero sums must occur |

`tb_tnn_classifier` drives the default network from voltages. It checks `feat`, `hidden` and `cls`
against a reference model every cycle, and checks the two-edge latency with a directed class change.
It also checks asynchronous reset.

It counts the following events, and each one must happen:

- a converter bit rising;
- a converter bit falling;
- a hidden neuron firing on a zero sum;
- the class changing in each direction;
- every one of the 8 feature vectors being applied.

An argmax tie is not on that list, because the example network cannot produce one. Its two output
scores always differ by exactly one. `tb_tnn_datasets` covers ties instead.

## Limits and departures

- **Approximate popcounts are not included.** In the full method, evolutionary search produces
  approximate popcount and popcount-compare circuits, and a second, multi-objective search picks
  one per neuron. Those gate netlists are what give most of the area savings, and none is
  reproduced here. `popcount` is the exact reference circuit that such a netlist would replace, one
  neuron at a time.
- **The comparator is wider in a corner case.** The width sometimes quoted for the comparator,
  `ceil(log2 max(n_pos, n_neg))`, is one bit short when the larger count is a power of two (64
  inputs can count to 64). This RTL uses `ceil(log2(max + 1))`. For the 45/39 neuron both give
  6 bits.
- **A zero sum counts as a positive output.** "Positive sum gives 1, negative gives 0" leaves zero
  open, and the neuron equation `Σ w·I ≥ 0` settles it.
- **These are this design's own choices:** the registers, the reset, the argmax tie rule and
  comparator chain, the class-index encoding, the weight encoding and the resistor values.
- **The converter model is idealised**, as described above. It uses `real` values, so synthesis
  tools that lack `real` support will reject `abc` and `tnn_classifier`. All the logic is in
  `tnn_core` and the modules below it, which synthesize on their own.
