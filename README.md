# A pipelined neural-network trigger for short detector traces

Very inclined air showers reach a ground detector as a thin front of muons.
In a water Cherenkov detector they produce a short bump in the ADC trace,
tens of nanoseconds long. Showers that start deep in the atmosphere, like
those a neutrino could cause, also produce an early bump, followed by a
spread-out electromagnetic tail. Many of these bumps are too small for an
amplitude threshold trigger. This trigger recognises them by their shape.
A small feed-forward neural network looks at every 16-sample window of the
trace, one window per ADC clock, and a comparator on the network output
decides.

The RTL implements the network as it was put in an FPGA for this purpose: a
16-input 12-8-1 network (12 tansig neurons, 8 tansig neurons, one linear
output neuron) in two's-complement fixed point. The transfer function comes
from lookup tables, and the weights can be reloaded while the network runs.
Training happens off-chip. Here the weights are just numbers loaded through
a port.

## Data flow

```
 ADC sample (12 b) --> adc_shift_register: 16 taps
                         |  (same 16 samples to every neuron)
                         v
   layer 1: 12 x [neuron 16 in -> tansig_addr -> ] 6 x tansig_ram3port (2 reads each)
                         |  12 x 14-bit tansig values
                         v
   layer 2:  8 x [neuron 12 in -> tansig_addr -> ] 4 x tansig_ram3port
                         |  8 x 14-bit tansig values
                         v
   layer 3:  1 x [neuron  8 in -> tansig_addr] --> net_out (14 b signed)
                         |
                         v
                 trigger_comparator (net_out > threshold) --> trigger

   coef_bank: 317 coefficient/bias words, loaded word by word, switched in one cycle
```

| file | role |
|---|---|
| `ann_pkg.sv` | sizes, formats, shift and scale factors, latencies, table formula, float-to-fixed conversion |
| `adc_shift_register.sv` | 16-tap sample window |
| `mult_add4.sv` | sum of four products, one register |
| `par_add.sv` | registered adder of the multiply-adder results |
| `neuron.sv` | N-input sum of products built from the two above |
| `tansig_addr.sv` | shift, bias, shift, offset and crop, giving the table address |
| `tansig_ram3port.sv` | 16384 x 14-bit tansig table with one write and two read ports |
| `ann_layer.sv` | one layer: neurons, address units and shared tables |
| `coef_bank.sv` | double-buffered weights |
| `trigger_comparator.sv` | final decision |
| `ann_trigger_top.sv` | one complete channel |

## Number formats and scaling

This is the part that needs the most care when you bring in weights from
training software.

**Inputs.** Raw 12-bit ADC codes, unsigned, pedestal included. There is no
pedestal subtraction; the first-layer biases absorb it.

**Weights.** Trained floating-point weights are first divided by a
suppression factor, which brings them into (-1, +1). They are then
multiplied by a scale and rounded. `ann_pkg::to_fixed(value, suppress,
scale)` does this:

| layer | coefficient: value / SFS * SFL | bias: value / SFX * SFB | register width (coef / bias) |
|---|---|---|---|
| 1 | / 2 * 131072 | / 8 * 524288 | 18 / 20 bits |
| 2 | / 4 * 32768 | / 8 * 32768 | 16 / 16 bits |
| 3 | / 2 * 32768 | / 2 * 32768 | 16 / 16 bits |

So one unit of a trained layer-1 weight is 2^16 in hardware, and one unit of
a layer-1 bias is also 2^16. The sum of products and the bias therefore share
a scale and can be added directly.

**Neuron arithmetic.** For each neuron:

```
S    = sum_k x_k * c_k                 32-bit signed
P    = S >>> SHP                       SHP = 0, 14, 13 for layers 1, 2, 3
N    = P + bias                        33 bits, cannot wrap
addr = crop((N >>> SHN) + 8192, 0, 16383)   SHN = 6, 1, 1
```

SHP brings the products of 14-bit tansig values and 16-bit weights back to
the bias scale. Check: in layer 2 a unit input is 8192 = 2^13 and a unit
weight is 2^13, so a unit product is 2^26; after `>>> 14` it is 2^12, the
same as a unit bias (32768 / 8). SHN then picks the part of the net input
that falls on the steep middle of the table. Arguments beyond the table
saturate: address 0 means tansig = -1 and address 16383 means +1.

**Transfer function.** Word i of every table is

```
round(8192 * (2 / (1 + exp(-2 (i - 8192) / 1536)) - 1)), clipped to -8192..8191
```

which is tanh((i - 8192) / 1536). Over the 16384 addresses this covers
tansig arguments of about -5.33 to +5.33. Tansig outputs are 14-bit signed
values, and these feed the next layer as signed data.

**Output.** The output neuron has no table. Its value is the cropped address
minus 8192 (the MSB of the address inverted), a 14-bit signed number. A
trigger is raised when it is above `threshold`.

### A width hazard kept on purpose

In the 16-input neuron, each four-input multiply-adder produces 32 bits. The
parallel adder takes only their low 30 bits and sign-extends them
(`L1_GROUP_W = 30`). That is what the published neuron diagram shows. A
group sum outside about ±5.4·10^8 wraps there. An example is four
near-full-scale samples meeting near-full-scale weights. Weights scaled as in
the table above stay far from this limit: a group of four full-scale samples
times weights of 1/64 (1024 in fixed point) gives about 1.7·10^7. If your weights are larger, set
`L1_GROUP_W` to 32 in `ann_pkg`. Layers 2 and 3 keep all 32 bits. Their
12- or 8-input sums can still wrap the 32-bit neuron output if nearly all
weights are near full scale at once.

## The neuron

`neuron` cuts its inputs into groups of four. Each group goes through a
`mult_add4` (four products, summed and registered), and one `par_add` sums
the groups. A 16-input first-layer neuron therefore uses four 12x18
multiply-adders and a four-input adder. The 12-input and 8-input neurons of
the later layers use three and two multiply-adders. The data operand is
zero-extended in layer 1 (ADC codes) and sign-extended after that (tansig
values).

## Shared tables

A table is 229,376 bits, so each `tansig_ram3port` serves two neurons through
two read ports: neurons 2m and 2m+1 of a layer share table m. The default
network has 6 + 4 = 10 tables, 2,293,760 bits in all. The write port of each
table is present but tied off, which makes it a ROM. Table contents are
computed when the design is elaborated, so no memory file is needed. An
FPGA flow that cannot evaluate `$exp` during elaboration needs an
initialisation file made from the formula above.

## Loading weights while running

`coef_bank` has two register sets. Words sent with `coef_wr_en` fill the
temporary set in a fixed order:

```
for each layer-1 neuron j = 0..11: c[j][0..15], bias[j]     (12 x 17 words)
for each layer-2 neuron j = 0..7:  c[j][0..11], bias[j]     (8 x 13 words)
output neuron:                     c[0..7], bias            (9 words)
```

That is 317 words, each sign-extended to 20 bits. `coef_wr_count` shows how
many have arrived. A one-cycle `coef_commit` copies the whole temporary set
into the final set, which drives the multipliers, and restarts the count;
`coef_restart` restarts the count alone. Until the commit, the network runs
on the old weights. A window still in the pipeline at the commit (one whose
sample arrived in the 14 cycles before it) is computed partly with old and
partly with new weights, so its output should be ignored. An assertion flags writes past word 317.

## Timing

Everything is one pipeline with no stalls or back-pressure. A new window
enters every clock, and `sample_valid` only says whether the window has
moved. A valid flag travels with the data:

| stage | cycles |
|---|---|
| sample -> window on the taps | 1 |
| neuron (multiply-add, parallel add) | 2 |
| tansig address | 1 |
| table read (registered address and data) | 2 |
| layer 2: same as layer 1 | 5 |
| layer 3: neuron + address | 3 |
| **sample -> `net_out`/`net_valid`** | **14** |
| comparator -> `trigger` | +1 |

The published design does not give its latencies. These numbers belong to
this implementation. The window order is `taps[0]` = newest sample feeding
neuron input 0.

## How this differs from the published design

- The two read ports share one memory array. The original uses two vendor
  dual-port RAMs fed with the same write signals and loaded from a file. The
  read clock and write clock are one clock here.
- The order of the coefficient stream, the commit/restart handshake and the
  `coef_wr_count` status are choices made here. Only "sequential loading,
  one-cycle reload" is given.
- "Cropped" address range is read as saturation.
- The published text writes the address as `(P >> SHN) + 8192` without the
  bias, and says elsewhere that the bias is added after the SHP shift. The
  bias is added before SHN here, which is the reading under which the scale
  factors agree.
- The threshold value and the compare sense (strictly greater) are free
  choices. A run-time input sets the threshold.
- One channel only. A three-PMT front end would hold three copies; how their
  triggers combine is not given.
- Latencies, reset values and the valid flag are choices made here.
- Not included: the ADC and its bridge board, the soft processor that
  captures traces, trains and sends weights, and the threshold or DCT
  trigger that freezes traces for training.

## Verification

Each module has a self-checking testbench in `tb/` that compares it with an
independent model (`tb_<module>.sv`). The end-to-end tests are:

- `tb_ann_trigger_top` uses the default sizes. It builds a synthetic trace
  with pedestal, noise, short bumps (some reaching ADC saturation), long
  spread-out signals and pauses in the sample stream. It loads one random
  weight set, then loads a second while running and commits it. A bit-exact
  model in the testbench predicts every output. That model has its own
  window, a table from `$tanh` and 64-bit integer arithmetic. The test checks
  every output and its 14-cycle latency, and the trigger. It fails if any of
  these never happened: a cropped-low, in-range or cropped-high first-layer
  address; a trigger high or low; an output on old weights during loading;
  an output on new weights after the commit; a stall.
- `tb_ann_networks` builds all nine three-layer shapes of the original
  network study (16 inputs; 16-12, 14-12, 14-10, 12-10, 12-8, 10-8, 10-6,
  8-6 and 8-4 hidden neurons) by setting `N_L1`/`N_L2`. Each shape is checked
  against the same model.

Trained weights and recorded detector traces are not part of this
repository, so the tests show arithmetic equivalence to the fixed-point
algorithm, not trigger efficiency.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
  --top-module tb_ann_trigger_top rtl/ann_pkg.sv tb/tb_ann_trigger_top.sv
./obj_dir/Vtb_ann_trigger_top
```

Replace the top module with any other `tb_*` name. Each testbench prints
`TB_RESULT checks=<n> failures=<m>`. The full-size test runs in well under a
second; building `tb_ann_networks` takes about a minute.

## Changing it

- Layer sizes: `N_IN`, `N_L1` and `N_L2` on `ann_trigger_top`. The stream
  length and `coef_wr_count` width follow from them.
- Formats, shift factors, table scaling (`TANSIG_SF`) and latencies live in
  `ann_pkg`. If you change `SHN` or the table scaling, re-derive the weight
  scales above.
- `ann_layer` with `TANSIG = 0` gives a linear layer. An odd neuron count
  leaves the second read port of the last table unused.
