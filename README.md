# A 5-6-1 feed-forward neural network in 8-bit integer hardware

This is a small, fully pipelined neural-network classifier meant for a
first-level trigger. A first-level trigger must decide, within a fixed handful of
clocks, whether an event looks like "signal" or like "background". Five signed
8-bit measurements enter together. Six hidden neurons and one output neuron work
on them. An 8-bit response appears 11 clocks later. A larger response means the
event is more signal-like, and a cut on it, for example `nn_out > 128` or
`nn_out > 179`, makes the decision. A new input pattern can be given on every
clock.

The network computes

    F(x) = g( (1/T) * sum_j w_j * g( (1/T) * sum_k w_jk * x_k + theta_j ) + theta )

with the activation `g(a) = 1 / (1 + exp(-2a))` and `T = 1`. The whole
computation is done in integers. Inputs, weights, thresholds and the outputs of
every neuron are 8 bits wide. Each neuron's activation comes from a look-up table
held in a 1024 x 16-bit block RAM, so the network uses seven such tables.

The architecture follows a published FPGA implementation, which targeted a
Xilinx Spartan-3 device. That publication gives the network shape, the 8-bit
buses, the block RAM tables, the half-table trick, the 11-clock latency and the
narrow internal pre-activation, including the overflow that comes with it. It
does not give number formats, a stage-by-stage schedule or the trained weights.
Those are this design's own choices, listed under
[Departures and choices](#departures-and-choices).

## Files

| file | contents |
|---|---|
| `rtl/nn_pkg.sv` | sizes, number formats, latency, the example weight set |
| `rtl/sigmoid_bram.sv` | one activation table: a 1024 x 16 read-only block RAM |
| `rtl/activation_unit.sv` | sign/magnitude split, table read, symmetry, rounding to 8 bits |
| `rtl/neuron.sv` | multipliers, adder, 1/T shift, threshold, cut to the internal width, activation |
| `rtl/nn_561_top.sv` | input register, 6 hidden neurons, output neuron, valid pipeline |
| `tb/nn_ref_pkg.sv` | bit-exact integer reference model, independent of the RTL |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_nn_561_wide` |

## Number formats

Every value on a bus has 8 bits. The position of the binary point is fixed per
signal type:

| quantity | type | bits | real value |
|---|---|---|---|
| input sample `x_k` | signed | 8 | `X / 16` (range -8 .. +7.94) |
| weight `w` | signed | 8 | `W / 16` |
| threshold `theta` | signed | 8 | `Theta / 16` (pre-activation units) |
| pre-activation `a` | signed | `PRE_W` = 8 | `A / 16` (range -8 .. +7.94) |
| table word | unsigned | 16 | `G16 / 65536` (Q0.16) |
| neuron output `h`, `nn_out` | unsigned | 8 | `h / 256` |

A product of a sample and a weight therefore carries 8 fractional bits. In the
hidden layer the sum is shifted right by 4 (`HID_SHIFT`) to reach the
pre-activation's 4 fractional bits. In the output layer, whose inputs are hidden
outputs with 8 fractional bits, the shift is 8 (`OUT_SHIFT`). With `T = 1`, these
shifts are the whole of the `1/T` rescaling. The shift is arithmetic, so it rounds
towards minus infinity.

## The narrow internal network and its overflow

This is the part most likely to surprise a user. It is also deliberate: it
reproduces the behaviour of the original hardware.

Inside a neuron, the products are summed at full width, so the sum itself never
overflows. After the shift and the threshold, however, the pre-activation is cut
to `PRE_W` = 8 bits. Only its low 8 bits are kept, in two's complement. A
pre-activation outside -8 .. +7.94 therefore **wraps around**. A strongly
negative sum can come out as a large positive pre-activation, which gives an
output near 255, and the other way round. For those patterns the output means
nothing. On plots of the hardware output against an exact integer model, these
patterns form a band of high outputs for inputs whose exact response is low. The
original work observed that band, and widening the internal network removes it.

`PRE_W` is a parameter of `neuron` and `nn_561_top` and can be raised to 11.
With the argument step of 1/16 used here, the same 1024-word table covers the
magnitudes of an 11-bit pre-activation (0..1024, where 1024 reads the last word,
by which point g has saturated). A wider internal network therefore costs no
extra block RAM in this implementation. `tb_nn_561_wide` runs the network at
`PRE_W = 11`.

With the example weights and the Gaussian test stream, the 8-bit network
overflows 924 times in 15,000 patterns and the 11-bit network never does. The
wider network changes 850 of the 15,000 outputs.

## Activation through a half table

`g` obeys `g(-a) = 1 - g(a)`, so only the half `a >= 0` is stored. This halves
the table that a neuron would otherwise need. Word `m` of the table holds

    G16[m] = min(65535, floor(65536 / (1 + exp(-2 * m / 16)) + 0.5)),  m = 0 .. 1023

`sigmoid_bram` computes these 1024 words with a constant function
(`make_table`, using `$exp`) when the design is elaborated. The result is a
constant array that the synchronous read turns into an initialised block RAM
(ROM). To change the function or the argument step, edit that function or the
`STEP_LOG2` parameter.

`activation_unit` turns the signed pre-activation `A` into an output in three
steps:

1. The magnitude `|A|` becomes the table address. `-128` gives address 128. The
   sign is registered alongside the block RAM read.
2. For a negative `A`, the value used is `65536 - G16[|A|]`. For a non-negative
   `A`, it is `G16[|A|]` (17 bits).
3. That value is rounded to 8 bits by adding 128 and dropping 8 bits, and clipped
   to 255.

For example, `A = 0` gives 128, `A = 127` gives 255 and `A = -128` gives 0.

## Pipeline and timing

| edge | stage | where |
|---|---|---|
| 1 | input register `x_q` | `nn_561_top` |
| 2 | 5 products per hidden neuron | `neuron` |
| 3 | sum | `neuron` |
| 4 | shift, threshold, cut to `PRE_W` bits | `neuron` |
| 5 | table read (block RAM output register) | `activation_unit` / `sigmoid_bram` |
| 6 | symmetry, rounding: hidden outputs `h_j` | `activation_unit` |
| 7-11 | the same five stages for the output neuron | `neuron` |

Drive `x_in` with `in_valid = 1` before a rising edge. That edge counts as edge 1,
and `nn_out` is valid, with `out_valid = 1`, right after edge 11. The pipeline
never stalls and has no back-pressure. A `valid` shift register of length
`LATENCY = 11` runs beside the datapath. `rst` is synchronous and active high,
and it clears only that shift register. The data registers are not reset, because
their contents matter only while `valid` accompanies them.

The hidden outputs enter the output neuron as 9-bit signed values with a zero
sign bit (`{1'b0, h}`), so its multipliers are 9 x 8 bits.

## Interface of `nn_561_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock |
| `rst` | in | 1 | synchronous reset of the valid pipeline |
| `in_valid` | in | 1 | `x_in` holds a pattern |
| `x_in` | in | `sample_t [5]` | signed samples, `X/16` |
| `out_valid` | out | 1 | `nn_out` holds a result |
| `nn_out` | out | 8 | `256 * F`, 0 .. 255 |

| parameter | default | meaning |
|---|---|---|
| `W_HID` | `DEF_W_HID` | 6 x 5 hidden weights (`w_hid_t`, row j = neuron j) |
| `TH_HID` | `DEF_TH_HID` | 6 hidden thresholds |
| `W_OUT` | `DEF_W_OUT` | 6 output weights |
| `TH_OUT` | `DEF_TH_OUT` | output threshold |
| `PRE_W` | 8 | width of the pre-activation (8 .. 11) |

The weights are packed arrays whose index 0 is the first value in an assignment
pattern. Read an element back with `$signed()`. The trained weights of the
original network were never published. The defaults in `nn_pkg` are an example
set, chosen by hand, with the right shape: 30 + 6 weights and 6 + 1 thresholds.
They separate the test stream's two classes moderately, and they overflow the
8-bit internal network for a few percent of patterns. To use a trained network,
quantise its weights as `round(16 * w)`, its thresholds as `round(16 * theta)`
and its inputs as `round(16 * x)`, then pass them as parameters.

## Resources

The design has 7 tables of 1024 x 16 bits, one per neuron, which is 7 block RAMs
on an FPGA with 18-kbit block RAMs. It has 30 + 6 = 36 multipliers: 8 x 8 bits in
the hidden layer and 9 x 8 bits in the output layer. With `PRE_W = 8` only words
0..128 of each table are ever read, so a synthesis tool may trim the rest.
The table contents are computed with real arithmetic (`$exp`) at elaboration.
Check that your synthesis flow evaluates such constant functions.

## Verification

Each testbench checks its module against values worked out independently. The
reference package recomputes the table with its own `$exp` code rather than
using the RTL's table. Each testbench prints `TB_RESULT checks=N failures=M`
and has a watchdog.

| testbench | what it does |
|---|---|
| `tb_sigmoid_bram` | reads all 1024 words, checks every one against the formula and checks the 1-clock read latency |
| `tb_activation_unit` | sweeps every 8-bit pre-activation back to back, then every 11-bit one, and checks the 2-clock latency, the symmetry, the rounding, the extremes and the clipping at magnitude 1024 |
| `tb_neuron` | a hidden-shaped neuron and an output-shaped neuron get 4000 random input sets, one per clock. It checks every output exactly 5 clocks later and requires both in-range and wrapped pre-activations (954 of 8000 wrap) |
| `tb_nn_561_top` | the whole network at its default parameters on 15,000 Gaussian patterns, half "signal" and half "background". The patterns come back to back with random idle gaps, after a burst that a reset flushes. Every output is compared bit for bit, at exactly 11 clocks. It counts back-to-back inputs, gaps, the flush, negative and non-negative activation arguments, and overflows in the hidden and output layers, and fails if any of these never happened |
| `tb_nn_561_wide` | the same stream with `PRE_W = 11`. It checks the outputs and compares the overflow counts and cut efficiencies with those of the 8-bit network |

15,000 patterns is the size of the validation run of the original hardware, and
`tb_nn_561_top` runs it at full size in well under a second. On the test stream,
with the example weights, `nn_out > 128` keeps 5376 of 7500 signal patterns and
2967 of 7500 background patterns. The figures for `nn_out > 179` are 5135 and
2707. These numbers describe the example weights, not the original network.

To run one testbench with Verilator:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_nn_561_top \
        -y rtl -y tb +libext+.sv rtl/nn_pkg.sv tb/nn_ref_pkg.sv tb/tb_nn_561_top.sv
    ./obj_dir/Vtb_nn_561_top

`-Wno-fatal` is needed because Verilator warns about the ascending packed
ranges (`[0:N-1]`) of the weight types. They are ascending on purpose, so that
index 0 is the first value written in an assignment pattern.

## Departures and choices

These follow the original design:

- the 5-6-1 shape
- 8-bit inputs, weights, thresholds and output
- 8-bit buses between neurons
- `T = 1` and `g(a) = 1/(1+exp(-2a))`
- one 1024 x 16 single-port block RAM table per neuron (seven in all), storing
  only half of `g` and using its symmetry
- an 8-bit internal pre-activation that can overflow
- an 11-clock latency

These are this implementation's own:

- **Binary points**, which the original does not give. Inputs, weights,
  thresholds and the pre-activation all have 4 fractional bits, the table
  argument step is 1/16, and the table words are Q0.16.
- **Overflow wraps around** rather than saturating. This is the behaviour that
  matches the meaningless outputs the original reports.
- **Rounding.** The 1/T shift rounds towards minus infinity. The 8-bit output is
  rounded to nearest and clipped to 255, where the original speaks of an output
  "bounded within [0, 2^8]".
- **Stage split.** The original spent some of its 11 clocks on conversions
  between VHDL integer and vector types. Here those clocks become pipeline
  registers (input register, products, sum), so the total stays 11.
- **Throughput, handshake and reset.** The original gives none of these. Here a
  new pattern can enter on every clock, a `valid` signal travels with each
  pattern, and the reset clears only the valid pipeline.
- **The table is a ROM** computed at elaboration. It has no write port.
- **The default weights are an example.** The trained values are not available.
- **Widening the internal network.** The original remarks that more internal
  bits would need more block RAMs. With this implementation's scaling, up to 11
  bits fit in the existing tables.
- **No decision comparator.** The cut that turns `nn_out` into a yes/no decision
  is left to the user of the design.
