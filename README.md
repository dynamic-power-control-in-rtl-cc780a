# An MLP digit classifier with run-time error-configurable multipliers

This is a small fixed-function accelerator for a three-layer perceptron
(62 inputs, 30 hidden neurons, 10 outputs) that classifies handwritten digits.
Its main idea is that the accuracy of its multipliers can be changed while it
runs. Every multiply-accumulate (MAC) unit has a 5-bit error-control input.
Value 0 gives exact products. The other 31 values switch off groups of partial
products, so less logic toggles and less power is used, at the cost of small
errors in the products. Classification tolerates these errors well, so the
control word works as a power knob. To save area, only ten physical neurons
are built. They are reused four times per image: three times for the hidden
layer and once for the output layer.

The RTL follows the published description of the design: "Dynamic Power Control in
a Hardware Neural Network with Error-Configurable MAC Units" (Ghaderi,
Delavari, Ghoreishy, Mirzakuchaki). That description gives the network shape,
the number formats, the MAC, neuron, datapath and controller structure. It does
not give the insides of the approximate multiplier, the memory organisation or
any interface timing. Those parts are this implementation's own; each is
marked below and in the header comment of its file.

## Network and schedule

```
 image memory ──pixel──┐                        ┌──────────── hidden_regs (3 x 10 x 8 bit)
 (outside the design)  ▼                        │                 │
                 ┌───────────┐   x, w[10], b[10]│  ┌───────────┐  │ write bank g
 param_memory ──▶│ input_mux │─────────────────▶│  │ neuron x10│──┤
 (weights/bias)  └───────────┘◀──hidden[feat]───┘  └───────────┘  └──▶ max_unit ──▶ pred
        ▲               ▲ sel_input/weight/bias         ▲ error_ctrl        ▲
        └──────── controller (5 states) ────────────────┴────── image_counter ──▶ done
```

All ten neurons receive the same input operand in a given cycle. Each neuron
gets its own weight and bias. One pass over all features takes one clock per
feature, plus one clock to store the results:

| state | input operand        | weights / biases    | cycles | at the end of the state                  |
|-------|----------------------|---------------------|--------|------------------------------------------|
| 0     | pixel 0..61          | hidden neurons 0-9  | 62 + 1 | results into hidden register bank 0      |
| 1     | pixel 0..61          | hidden neurons 10-19| 62 + 1 | bank 1                                   |
| 2     | pixel 0..61          | hidden neurons 20-29| 62 + 1 | bank 2                                   |
| 3     | hidden reg 0..29     | output neurons 0-9  | 30 + 1 | arg-max → `pred`, image count + 1; back to state 0, or to state 4 after the last image |
| 4     | —                    | —                   | —      | `done` high; also the idle state after reset |

One image takes 3·63 + 31 = **220 clock cycles**, which is 2.2 µs at the
100 MHz clock the source design was characterised at. In the final cycle of a
state, each MAC's accumulated sum is used and then cleared, so no cycle
between passes is wasted.

## Number format and the two-accumulator MAC

Every value that moves between blocks is an 8-bit **sign-magnitude** number:
bit 7 is the sign (1 = negative) and bits 6:0 the magnitude. Pixels, weights,
biases and neuron outputs all use this format. Products are 14-bit magnitudes.
A sum of 62 of them is at most 62·127·127 = 999,998 < 2²⁰, so the MAC result
is 21 bits: a sign plus a 20-bit magnitude.

Sign-magnitude values are awkward to accumulate, so the MAC (`ecmac`) never
adds signed numbers. It keeps two unsigned accumulators:

* `y_pos` collects the products whose sign is positive;
* `y_neg` collects the products whose sign is negative.

The sign of a product is the XOR of the two operand sign bits. It steers a
pair of multiplexers: one accumulator receives `acc + product` while the
other reloads its old value. The magnitudes go to the multiplier unchanged.
The running result is formed from the two accumulators by combinational
logic:

```
result = (y_pos > y_neg) ? {0, y_pos - y_neg} : {1, y_neg - y_pos}
```

A comparator and two subtractors over bits 19:0 do this. When the two
accumulators are equal, this rule yields a "negative zero" (sign 1, magnitude
0). The source diagram draws it this way and the RTL keeps it; the neuron's
ReLU maps it to 0.

`en` accepts one input/weight pair per clock. `result` includes every pair
accepted up to the previous clock edge. `clr` empties both accumulators and
takes priority over `en`.

## The error-configurable multiplier

`approx_mult` is a 7×7 array multiplier written as a sum of AND partial
products `a[i]&b[j]·2^(i+j)`. Bit *k* of the error word (*k* = 0..4) forces
to zero every partial product in column *k*, that is every product with
*i + j = k*:

* `error = 0` gives the exact product;
* `error = 31` drops the five lowest columns.

The result is never above the exact product. It is at most
1 + 4 + 12 + 32 + 80 = 129 below it, against a largest product of 16,129.
Because each error bit gates the inputs of whole columns of AND gates, those
gates and the adders behind them stop switching.

**This scheme is not the one from the source design.** The source describes a
multiplier with a 5-bit control, 32 configurations and configuration 0 exact.
It publishes error statistics for it: error rate 9.96–61.83 % and mean relative
error distance 0.05–3.68 % over the 31 approximate configurations. It does not
say how the multiplier works. Column gating is the simplest circuit with the
same interface and the same meaning of configuration 0. Its statistics are
different. Measured exhaustively over all 7-bit operand pairs (printed by
`tb_approx_mult`), over configurations 1–31:

| metric     | this multiplier (min / max / mean) | published for the original (min / max / mean) |
|------------|------------------------------------|-----------------------------------------------|
| ER   [%]   | 25.0 / 89.1 / 75.8                 | 9.96 / 61.83 / 43.56                          |
| MRED [%]   | 0.058 / 3.78 / 1.95                | 0.055 / 3.68 / 2.13                           |
| NMED [%]   | 0.0016 / 0.200 / 0.103             | 0.0028 / 0.364 / 0.224                        |

The relative error range is close to the original's. The error rate is much
higher, because gating column 0 alone already corrupts one product in four.
To use a different
approximate multiplier, replace `rtl/approx_mult.sv` and keep its ports; the
header comment states the contract.

## Neuron: bias, ReLU, saturation

`neuron` wraps one MAC and adds the output stages of the source design:

1. `y = mac_result + bias`. This is a sign-magnitude addition: signs equal
   → add the magnitudes; signs differ → subtract the smaller from the larger
   and keep the larger's sign. The 8-bit bias is added unscaled.
2. ReLU: if `y[20]` (the sign) is set, the value becomes 0.
3. Saturation: a value above 127 becomes `8'b0111_1111`. Otherwise the output
   is `{0, O[6:0]}`.

The output is therefore always a non-negative 8-bit sign-magnitude number in
0..127. It can feed the next layer directly. The output layer goes through the
same stages because it runs on the same ten neurons. As a result, several
outputs can saturate at 127 together. `max_unit` then picks the lowest index,
which is this implementation's own tie rule.

## Controller

`controller` has the five states of the source design, numbered as there. It
holds a cycle counter `k` within the current state. `k` is both the feature
address (`feat`) and the end-of-pass condition: the pass ends when `k` reaches
62, or 30 in state 3. It decodes from the state:

* `sel_input` (pixel or hidden register);
* `sel_weight` and `sel_bias` (equal to the state number);
* `reg_write` and `reg_select`;
* `max_en` and the counter increment.

In state 3, `image_counter` reports whether the image just finished was the
last one (`count + 1 >= num_images`). After reset the controller waits in
state 4 with `done` low. A `start` pulse clears the image counter and enters
state 0. `done` rises when state 4 is reached at the end of a run.
Assertions check three things:

* the hidden registers are written only in states 0–2;
* the arg-max is enabled only in state 3;
* the feature index stays in range.

## Interfaces of `mlp_top`

| group          | signals | notes |
|----------------|---------|-------|
| clock/reset    | `clk`, `rst_n` | asynchronous active-low reset for all control and datapath registers; the parameter memory is not reset |
| run control    | `start`, `num_images[15:0]`, `error_ctrl[4:0]`, `done`, `images_done[15:0]`, `fsm_state[2:0]` | `error_ctrl` applies to all ten MACs; keep it stable during an image |
| image memory   | `img_rd_en`, `img_addr[15:0]`, `img_feat[5:0]` out, `img_data[7:0]` in | pixel must be returned **in the same cycle** (combinational read); `img_addr` is the image index, `img_feat` the feature 0..61 |
| parameter load | `ld_en`, `ld_bias`, `ld_grp[1:0]`, `ld_feat[5:0]`, `ld_neuron[3:0]`, `ld_data[7:0]` | one byte per clock, before `start` |
| result         | `pred[3:0]`, `pred_valid` | `pred_valid` is high for one cycle per image, 220 cycles apart |

Parameter layout for the load port:

* Group *g* = 0..2, `ld_bias = 0`: the weight from pixel `ld_feat` to hidden
  neuron 10·*g* + `ld_neuron`.
* Group 3, `ld_bias = 0`: the weight from hidden neuron `ld_feat` (0..29) to
  output neuron `ld_neuron`.
* `ld_bias = 1`: the bias of the same neuron (`ld_feat` ignored).

`param_memory` stores the weights as four banks of 62 rows. Each row holds
ten bytes, one per neuron, so a single read feeds all ten neurons. Its
capacity is 2480 weight bytes, against the 62·30 + 30·10 = 2160 the network
uses.

Timing note: an image memory with a registered read (a
typical SRAM) needs its address one cycle early. The controller would need
one cycle of lookahead, and the RTL does not provide it.

## Departures from the source design

* **Approximate multiplier insides**: own scheme (see above). Accuracy and
  power figures of the original therefore do not carry over.
* **Product sign**: the source text says the product is negative "if either
  input is negative", which describes an OR. Its diagram and the rest of its
  text use an XOR, and so does the RTL, which is correct for two negative
  operands.
* **One product per clock per neuron.** The source sequences the input data
  "in each clock cycle", and its MAC diagram feeds back the previous sums.
  Its neuron diagram labels the operands "#features × 8", which could also
  mean a fully parallel dot product. The sequential reading was taken; it
  matches the small area reported for the design.
* **Image storage**: the source loads the data set into an external memory,
  so the design has an image-memory port and no on-chip image store. The
  feature reduction from 28×28 pixels to 62 features is not described in the
  source and also happens outside the design.
* **Own choices** where the source is silent: the memory layout and load
  port, `start`/`done` and waiting in state 4 after reset, one write cycle per
  state, the image counter width (16 bits, enough for the 10,000-image MNIST
  test set), the arg-max tie rule, and the reset style.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. `tb/mlp_ref_pkg.sv` is a reference model
written independently of the RTL. It builds the approximate product row by
row and does neuron arithmetic on plain signed integers.

| testbench          | what it checks |
|--------------------|----------------|
| `tb_approx_mult`   | all 128×128 operand pairs in all 32 configurations; configuration 0 exact; no overestimate; error bound 129 |
| `tb_ecmac`         | 300 random signed 62-term streams, hold with `en` low, clear, negative zero, largest sum without overflow |
| `tb_neuron`        | 1000 random streams with biases; ReLU, saturation and linear outputs each occur |
| `tb_param_memory`  | every weight and bias byte written and read back |
| `tb_input_mux`     | random selections and operands |
| `tb_hidden_regs`   | random bank writes against a model of all 30 registers |
| `tb_max_unit`      | arg-max with many ties, enable, one-cycle valid |
| `tb_image_counter` | count, clear and the `last` flag |
| `tb_controller`    | every output on every cycle over two runs; 220 cycles per image; loop back and end |
| `tb_mlp_top`       | whole design at full size. A random network and 12 random images are classified in each of the 32 configurations. Every prediction and all 30 hidden registers are compared with the reference, and the 220-cycle spacing is checked. It counts that ReLU clamping, saturation, loop-back, run end and approximation-induced changes all occur |

The weights and images in `tb_mlp_top` are random, not a trained network or
real MNIST digits. The test therefore checks the arithmetic and the
sequencing, not classification accuracy. It prints, for each configuration,
how many labels agree with the exact configuration. With a trained network
that count approximates the accuracy loss.

To run one testbench with Verilator (5.x):

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/mlp_pkg.sv tb/mlp_ref_pkg.sv tb/tb_mlp_top.sv --top-module tb_mlp_top
./obj_dir/Vtb_mlp_top
```

Replace `tb_mlp_top` with any other testbench name. The full-size end-to-end
test runs in well under a second.

## Changing the design

The network shape, the widths and the neuron count are constants in
`rtl/mlp_pkg.sv`. The lower-level modules take them as parameters. The
controller, input multiplexer and memory are sized from `N_IN`, `N_HID` and
`N_NEURONS`. The 2-bit bank selects and the 6-bit feature address in
`mlp_top` and `controller` assume at most four passes and at most 64
features. The sign-magnitude helper `sm_add21` in the package is fixed at 21
bits.
