# A weightless (LUT-based) activity classifier that needs no arithmetic before the final count

This RTL classifies a 2.56 s window of wearable inertial data into one of six
activities: walking, walking upstairs, walking downstairs, sitting, standing,
laying. The model is a Differentiable Weightless Neural Network (DWN). Its
neurons are small lookup tables (LUTs), not weighted sums, and each class score
is a count of ones. Training fixes which input bits feed each LUT and what each
LUT holds. After that the whole network is constant Boolean logic plus six
adder trees. The pipeline takes one new window every clock.

The main configuration classifies the UCI-HAR raw signals:

| quantity | value |
|---|---|
| raw signals | 9: 3-axis body acceleration, 3-axis gyroscope, 3-axis total acceleration |
| window | 128 samples per signal (50 Hz, 2.56 s) |
| encoding | 20-bit distributive thermometer code per sample, giving 23,040 input bits |
| network | one layer of 10,000 LUT-4 neurons (16 table bits each, 19.5 KiB of model) |
| classes | 6, each scored by a popcount over its share of the LUT outputs |
| throughput | one window per clock |
| latency | 8 clocks (40 ns at about 200 MHz) |

A larger variant with 20,000 LUTs (39.1 KiB, one extra clock of latency) is
obtained by setting `NUM_LUTS = 20000`. Verilator then needs
`--unroll-limit 40000`.

## Data path

```
samples[9][128] (16-bit signed)
   |
thermometer_encoder   9 x 128 x 20 constant compares, registered      stage 1
   |  code[23039:0]
lut_layer             10,000 LUT-4s: 4 wired input bits -> 1 table bit  (combinational)
   |  y[9999:0]  split into 6 contiguous groups of 1,667 (last: 1,665 + 2 zero pads)
popcount x 6          adder tree, 11 levels, registered every 2 levels  stages 2..7
   |  scores[6] (11 bit)
argmax                first maximum wins, registered                    stage 8
   |
class_idx, class_scores, out_valid
```

A `valid` bit travels with each window. There is no back-pressure. A result
appears exactly `LATENCY` clocks after its window, and `in_valid` may stay high
forever. Only the valid bits are reset (active-low, asynchronous). Data
registers hold whatever they last held.

## Thermometer encoding (`thermometer_encoder`)

Each signal `s` has 20 ascending thresholds `t[s][0] < ... < t[s][19]`. Code
bit `j` of a sample is `sample > t[s][j]`. A large reading therefore lights a
long run of ones starting at bit 0. "Distributive" means the thresholds are set
at quantiles of the training data, so each bit is set for a known share of
samples. The flattened input vector is ordered signal-major, then time step,
then thermometer bit:

```
code[(s*128 + t)*20 + j] = (samples[s][t] > t[s][j])
```

The thresholds are constants, so each of the 23,040 bits is a compare against
a constant. In a wearable product this step could sit in the sensor itself.
Here it is the first pipeline register of the classifier.

## The LUT layer and the learned mapping (`lut_layer`)

LUT `i` reads four bits of `code`. Which four is a learned mapping, fixed by
training, so in hardware it is only wiring: address bit `k` of LUT `i` is
`code[lut_src(i, k)]`. The four bits form an address (input 0 is the LSB), and
the LUT outputs bit `address` of its 16-bit truth table `lut_table(i)`. Nothing
else happens in this layer. An FPGA maps each neuron onto a single LUT
primitive. An ASIC turns it into a small, fixed gate network.

### Model contents

A trained DWN is completely described by three tables:
- the mapping `lut_src(i, k)`;
- the truth tables `lut_table(i)`;
- the thresholds `therm_threshold(s, j)`.

All three are functions in `rtl/dwn_pkg.sv`, and no other file holds model
data. The trained values of the published models are not available. The
functions therefore compute a fixed, deterministic stand-in from a 32-bit
integer hash (`mix32`, the "lowbias32" mixer):

```
lut_src(i, k, n)         = mix32(MAP_SEED ^ mix32(8*i + k)) mod n
lut_table(i)[32w +: 32]  = mix32(TABLE_SEED ^ mix32(8*i + w)),   w = 0..7
therm_threshold(s, j)    = -32768 + (j+1) * 65536 / 21           (16-bit samples)
```

The stand-in thresholds are evenly spaced. That is what the distributive rule
would give for uniformly spread data. With these contents the RTL is exactly the
right size, shape and timing for the model, but its predictions are not those
of a trained network. To deploy a trained model:
1. Export the mapping, the truth tables and the thresholds from training.
2. Replace the bodies of the three functions, for example with case tables or
   closed forms that your tools accept.

Every module and testbench reads the model through these functions, so nothing
else has to change.

## Class scores (`popcount`) and pipelining

The LUT outputs are divided into six contiguous groups of
`GROUP = ceil(NUM_LUTS / 6)`. 10,000 is not a multiple of 6, so the last group
is padded with constant zeros, which count nothing. The score of a class is the
number of ones in its group.

Each score comes from a binary adder tree of `ceil(log2 GROUP)` levels. An odd
node at the end of a level passes straight up. The tree's registers are placed
by one rule: a register follows every second logic level. The LUT layer counts
as the first of these levels, so the first register comes after the LUT layer
and the first adder level. With 1,667 bits the tree has 11 adder levels, and
registers follow levels 1, 3, 5, 7, 9 and 11: six stages. With 20,000 LUTs
there are 12 levels and a seventh stage follows level 12. Total latency is 1
(encoder) + 6 (trees) + 1 (argmax) = 8 clocks, or 9 clocks at 20,000 LUTs.

`dwn_pkg::popcount_stages(width, offset, levels_per_stage)` computes the stage
count. The top derives `LATENCY` from it. Change `LEVELS_PER_STAGE` to trade
clock rate against latency.

## Decision (`argmax`)

The highest score wins. On a tie the lower class index wins, the same rule as a
software `argmax`. The class encoding is `dwn_pkg::activity_e`: 0 walking,
1 walking upstairs, 2 walking downstairs, 3 sitting, 4 standing, 5 laying. All
six scores are output alongside the class, aligned with it, so they can serve
as confidences.

## Parameters of `dwn_har_top`

| parameter | default | meaning |
|---|---|---|
| `NUM_SIGNALS` | 9 | raw signals per window |
| `WINDOW` | 128 | samples per signal |
| `THERM_BITS` | 20 | thermometer bits per sample |
| `SAMPLE_W` | 16 | signed sample width |
| `NUM_LUTS` | 10000 | LUT neurons (20000 for the larger model) |
| `LUT_K` | 4 | inputs per LUT (up to 8) |
| `NUM_CLASSES` | 6 | activity classes |
| `LEVELS_PER_STAGE` | 2 | logic levels between pipeline registers in the adder trees |

Ports: `clk`, `rst_n`, `in_valid`, `samples[NUM_SIGNALS][WINDOW]` in;
`out_valid`, `class_idx`, `class_scores[NUM_CLASSES]` out.

## Where this RTL goes beyond or departs from the published description

The source describes the network (thermometer inputs, one layer of LUT-4s with
learned wiring, a popcount per class), its sizes, one inference per clock and
the latency. This design adds the following choices of its own:

- Model contents are placeholders, as described above.
- The 16-bit signed sample format and the flattening order are this design's
  choices.
- The strict `>` compare is also this design's choice.
- The thermometer encoder is part of the pipeline. The published FPGA
  measurements took already encoded inputs.
- LUTs are split among classes in contiguous groups, with zero padding.
- The adder-tree register placement was chosen so that the 8-clock and 9-clock
  latencies of the two model sizes both come out. The source gives the
  latencies but not the pipeline structure.
- The argmax stage, its tie rule and valid-only reset are this design's
  choices. The source only says the class counts "determine" the activity.
- The source's search also allowed 2 to 4 LUT layers, but the chosen model
  has one. Only a single layer is built. `lut_layer` is generic, so layers can
  be chained by hand.
- Register count is higher than the published FPGA build. That build used
  20,444 LUTs and 13,948 flip-flops. Here, coarse synthesis gives about
  41,000 flip-flop bits: 23,041 in the encoder register, 2,980 in each of the
  six adder trees and 81 in the argmax. The published build took already
  encoded inputs, so it did not register all 23,040 code bits. It must also
  have registered its trees more sparsely. Removing the encoder register or
  raising `LEVELS_PER_STAGE` moves toward that build, but changes `LATENCY`.
- No host interface or data transfer logic is included. The published numbers
  are for the classifier alone.

## Simulating

Every testbench checks itself and prints `TB_RESULT checks=N failures=M`. Each
has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert --top-module tb_dwn_har_top \
    rtl/dwn_pkg.sv rtl/thermometer_encoder.sv rtl/lut_layer.sv \
    rtl/popcount.sv rtl/argmax.sv rtl/dwn_har_top.sv tb/tb_dwn_har_top.sv
./obj_dir/Vtb_dwn_har_top
```

| testbench | what it checks |
|---|---|
| `tb_thermometer_encoder` | every code bit against recomputed thresholds; samples on, below and above the thresholds; 1-clock latency |
| `tb_lut_layer` | every LUT output against a lookup from the model tables |
| `tb_popcount` | counts against `$countones`; exact 4-clock latency of a 37-bit tree; gaps in `in_valid` |
| `tb_argmax` | winner, maximum and tie rule; 1-clock latency |
| `tb_dwn_har_top` | the whole pipeline at a reduced size (60 input bits, 40 LUTs) against a reference model. Back-to-back windows, bubbles, ties, saturated samples and a reset mid-stream must each occur. |
| `tb_dwn_har_full` | the default-size design: five windows against the reference model, exact 8-clock latency, one result per clock |

The default-size design builds in a few minutes with Verilator and simulates
in seconds.

The largest size simulated is the default one, with 10,000 LUTs. The
20,000-LUT variant passes Verilator lint with the same code but has not been
simulated. Its 20,000-iteration generate loop in `lut_layer` is above
Verilator's default unroll limit of 16,384, so it needs `--unroll-limit 40000`.
