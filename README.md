# A multiplier-free, clockless digit classifier

This is synthesizable SystemVerilog for a small fully connected neural network that
classifies 28x28 images of hand-written digits (MNIST style) into the classes 0 to 9.
It is built the way it is described in "Optimization Techniques to Improve Inference
Performance of a Forward Propagating Neural Network on an FPGA" (Adiletta and
Flanagan). The network was trained in software. For inference it is reduced so far that
almost nothing is left of it in hardware:

* every pixel becomes one bit,
* every hidden node output becomes one bit,
* every weight is a small integer that is built into the logic instead of being stored.

A layer then needs no multiplier. Each node only adds up the constant weights of the
inputs that are 1. The whole network after the input register is one block of
combinational logic. An image is clocked into the input register, and the class comes
out one logic delay later, with no further clock, state or memory. A new image can be
clocked in on every cycle.

## The network

| layer  | nodes | what each node computes |
|--------|-------|-------------------------|
| input  | 784   | `in[i] = pixel[i] >= 128`: 1 bit, the pixel's most significant bit |
| hidden | 500   | `hi[j] = Σ_i w0[i][j]·in[i]` (signed), then `ho[j] = (hi[j] >= 0)`: 1 bit |
| output | 10    | `fi[k] = Σ_j w1[j][k]·ho[j]` (signed) |
| class  | 1     | the `k` with the largest `fi[k]` |

The weights are integers from -9 to +9. The software network this comes from used a
sigmoid, pixels scaled to 0..1 and real-valued weights. Three steps turn it into the network
above. Its reported accuracy was 98% at the start, 95% with a step activation, 94% with
binarized pixels, and 92% with weights truncated to integers. Those figures belong to the
trained weights, which are not part of this RTL (see *Weights*).

## How a layer is built without multipliers

Because every input of a layer is a single bit, a product `w·x` is either `0` or the
constant `w`. The "multiplication" is therefore a choice of whether to add a constant.
Take a node with the weights 3, 1 and 1:

    hi = 3·in1 + 1·in2 + 1·in3   =   in1 + in1 + in1 + in2 + in3

`selected_addend_layer` builds exactly this. For every node it runs over all inputs,
and for each input that is 1 it adds that input's weight, a constant known when the
design is elaborated. This has two results:

* **Zero weights vanish.** If a weight is 0, nothing is added and the input is not
  even wired to that node. With integer weights that were truncated from small real
  values, about half of all weights are zero. The generated logic shrinks accordingly.
* **No weight memory.** The weights only exist as the constants that synthesis folds
  into each node's adder. Changing the weights means building the design again.

A single module serves both weight matrices: `LAYER = 0` for input->hidden and
`LAYER = 1` for hidden->output. How the adders are arranged (chain or tree) is left to
synthesis. The RTL describes a running sum.

**Sum widths.** A node with `n` inputs and weights of magnitude at most 9 can reach
±9n. The sum is made `$clog2(9n+1)+1` bits wide, so it can never overflow. That is 14
bits for the hidden layer (784 inputs, |sum| ≤ 7056) and 14 bits for the output layer
(500 inputs, |sum| ≤ 4500). For the three-input example used to explain the design, the
same formula gives the 6-bit sums the example uses.

## Activations and the sign bit

The step activation is `ho = 1` when the hidden sum is not negative. In two's complement
that is just the inverted sign bit, so `step_activation` is one inverter per node. A sum
of exactly zero therefore gives 1. The source states this rule in three slightly
different ways: `> 0`, "non-negative", and "an inverter on the MSB". This RTL follows the
inverter.

The input binarization is built the same way. `input_lut` compares `pixel >= THRESHOLD`.
At the default of 128 with 8-bit pixels, that comparison is exactly the pixel's MSB, and
synthesis reduces it to a wire. A pixel of exactly 128 gives 1. The unoptimized form of
the design compared with `> 128`, which would give 0 for that one value.

## Picking the class

`prediction_lut` returns the output node with the largest `fi`. The result comes both as
a one-hot vector `prediction[9:0]` (bit k set for class k) and as a binary
`pred_class`. When several nodes share the maximum, the highest-numbered one wins. This
is what the three-output reference expression of the design does:

    (fi1 > fi2 && fi1 > fi3) ? 1 : (fi2 > fi3) ? 2 : 3

It selects the first node that is strictly larger than every node after it. That node is
always the last one holding the maximum. The RTL gets the same result with a running
`>=` comparison from node 0 upwards.

## Timing and interface of `ff_nn_top`

| port         | dir | width                | meaning |
|--------------|-----|----------------------|---------|
| `clk`, `rst_n` | in | 1                  | clock of the input register; synchronous active-low reset |
| `in_valid`   | in  | 1                    | capture `pixels` at this rising edge |
| `pixels`     | in  | `[N_IN-1:0][PIX_W-1:0]` | the image; the order of pixels does not matter to the logic (tests use row-major) |
| `out_valid`  | out | 1                    | high for one cycle after each capture |
| `prediction` | out | `[N_OUT-1:0]`        | one-hot class |
| `pred_class` | out | `$clog2(N_OUT)`      | class number 0..N_OUT-1 |
| `final_in`   | out | `N_OUT` x `FI_W` signed | output-node sums, for observation |

The input register is the only storage. At the edge where `in_valid` is high, the image
is captured. During the next cycle `out_valid` is high, and the outputs show that image's
result after the combinational delay. If no new image is loaded, the outputs keep showing
the last result. With `in_valid` high on every cycle, the design produces one
classification per clock.

The clock period must cover the whole combinational path: 784-input adders, a
500-input adder and a 10-way comparison. The original FPGA build reports a propagation
delay of about 20 ns. At that delay, one register stage supports about 50 MHz. The
source also quotes 500 million predictions per second for a 500 MHz clock, but that rate
would need the whole path to settle within 2 ns. Faster clocks would need pipeline
registers, which are not part of this design.

## Weights

The trained weights of the original network were not published. `nn_pkg::weight(seed,
layer, i, j, wmax)` stands in for them. It is a 32-bit integer hash of its arguments that
is mapped to -9..+9, with about half of the results zero. Everything, testbenches
included, takes its weights from this one function. To run a trained network:

1. Quantize the trained float weights to integers in -9..+9, as the original work does.
2. Replace the body of `weight()` with a lookup of those values, for example a
   `case` on `(layer, i, j)`, or a constant table produced by your own training flow.
   Keep `W_MAX` equal to the largest magnitude.

With the stand-in weights the design computes correctly, but its "predictions" mean
nothing. Most random images land in the same one or two classes.

## Files

| file | block |
|------|-------|
| `rtl/nn_pkg.sv` | sizes, `sum_width()`, the weight function |
| `rtl/input_register.sv` | the clocked image register and valid pulse |
| `rtl/input_lut.sv` | pixel binarization |
| `rtl/selected_addend_layer.sv` | one weight matrix: the hidden-input or final-input sums |
| `rtl/step_activation.sv` | sign-bit step activation |
| `rtl/prediction_lut.sv` | maximum selection, one-hot and binary class |
| `rtl/ff_nn_top.sv` | the complete classifier |

Top-level parameters (defaults in brackets): `N_IN` [784], `N_HID` [500], `N_OUT`
[10], `PIX_W` [8], `THRESHOLD` [128], `W_MAX` [9], `SEED` [1]. The sum widths are
derived from them.

## Verification

Every block has a self-checking testbench in `tb/`. Each one compares the block against
values computed independently in the testbench, and ends with a line
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|-----------|----------------|
| `tb_input_register` | load/hold/reset of the full 784x8-bit register and the valid pulse, 200 random cycles |
| `tb_input_lut` | every pixel against `>= 128` at the boundary values 0, 99, 127, 128, 129, 255 and random images; a second instance with cut-off 100 |
| `tb_step_activation` | every 6-bit value -32..31, and random 14-bit sums at the full width |
| `tb_selected_addend_layer` | the 3x3 layer exhaustively (6-bit sums); a 64x16 layer with one-hot, all-0, all-1 and random inputs; the full 784x500 layer on random images; the share of zero weights |
| `tb_prediction_lut` | random and tie-heavy inputs against "maximum, then highest class holding it"; 125 three-way cases against the reference expression |
| `tb_ff_nn_top` | the full-size design, default parameters. 50 images (blank, saturated, all pixels at 127/128, stroke patterns, random) streamed back-to-back and with gaps. It checks `out_valid` timing, `final_in`, the class and all 500 hidden activations on every cycle against a software model of the network (`tb/nn_ref_pkg.sv`), and counts back-to-back loads, held results, pixels at 128, hidden nodes off and on, and pruned weights |
| `tb_ff_nn_3x3` | the top at the three-input example size, all 64 images over {0,127,128,255}³ |

The software model in `nn_ref_pkg` multiplies and uses full-width integers. It shares
only the weight function with the RTL.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -j 4 \
      rtl/nn_pkg.sv tb/nn_ref_pkg.sv rtl/input_register.sv rtl/input_lut.sv \
      rtl/selected_addend_layer.sv rtl/step_activation.sv rtl/prediction_lut.sv \
      rtl/ff_nn_top.sv tb/tb_ff_nn_top.sv --top-module tb_ff_nn_top
    ./obj_dir/Vtb_ff_nn_top

The full-size end-to-end test builds in well under a minute and runs in a few seconds.

## Implementation notes and limits

* **Synthesis cost.** Each node's sum is written as a loop that calls the weight function.
  Simulators and linters handle this quickly. A synthesis tool has to unroll 392,000
  iterations and constant-fold a hash for each one, which takes a long time. If that
  matters, precompute the weights as constant tables, or emit them from your training
  flow. The result is the same logic.
* **Departures from the source and own choices.** The weight values (stand-ins, see
  above). The valid pulse, the load enable and the reset (the source only says that
  images are clocked into input registers). Sum widths for sizes other than the 6-bit
  example. The one-hot output next to a binary class number (the example uses a 2-bit
  code counted from 1; the full design shows ten prediction outputs). The tie rule,
  which is generalized from the three-output expression. The `>= 0` and `>= 128` rules
  where the source's wording varies (see above).
* **Not included.** The software that trains the network and generates the HDL. Any
  FPGA-specific constraints or I/O (camera or host interface). Pipelining.
