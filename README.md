# A pipelined neural network that predicts qubit control pulses

To make a superconducting qubit perform a rotation `U(beta)` about the x axis, a
control system has to drive it with a shaped microwave pulse. An optimal-control solver
can find such a pulse, here described by 20 B-spline amplitudes `alpha`, but it needs
an expensive numerical optimisation for every angle `beta`. A lookup table of
precomputed pulses is fast, but it only knows the angles it stores. This design takes
a third route. A small multi-layer perceptron, trained offline to imitate the solver,
turns `beta` into `alpha` in hardware. It is fully parallel and pipelined, so it
accepts one angle every clock cycle and returns the pulse 35 cycles later: 175 ns at
the 5 ns (200 MHz) clock the network was built for.

The RTL reproduces the final, smallest published version of that accelerator, the one
that fits an Artix-7 100T FPGA. It gives the network shape, the per-layer fixed-point
word widths, the initiation interval of one cycle and the 35-cycle latency. The
trained weights are not published, so here they are loaded at start-up through a small
configuration port. The original flow compiles them into the logic as constants.

## The network

```
beta ──► [1→4] ──► [4→8] ──► [8→11] ──► [11→11] ──► [11→11] ──► [11→11] ──► [11→20] ──► alpha[0..19]
         ReLU      ReLU      ReLU       ReLU        ReLU        ReLU        linear
         14 bit    12 bit    10 bit     10 bit      10 bit      10 bit      12 bit
```

There are six hidden layers and one output layer, holding 783 weights and biases in
all (8 + 40 + 99 + 3·132 + 240). Each box is a `dense_layer`. A layer has one multiplier
per weight, 743 in all, and one adder tree per neuron. Nothing is time-multiplexed.

| layer | neurons | inputs | format of weights, biases, outputs | multipliers |
|------:|--------:|-------:|------------------------------------|------------:|
| input |       1 |      – | ap_fixed<14,2> (beta/pi)           |           – |
| 1     |       4 |      1 | ap_fixed<14,2>                     |           4 |
| 2     |       8 |      4 | ap_fixed<12,2>                     |          32 |
| 3     |      11 |      8 | ap_fixed<10,2>                     |          88 |
| 4–6   |      11 |     11 | ap_fixed<10,2>                     |     3 × 121 |
| 7     |      20 |     11 | ap_fixed<12,0>                     |         220 |

`ap_fixed<W,I>` is a W-bit two's-complement number with I integer bits, counting the
sign. `ap_fixed<10,2>` therefore covers [-2, 2) in steps of 2^-8. The output format
`ap_fixed<12,0>` covers [-0.5, 0.5) in steps of 2^-12.

All these numbers live in `rtl/qc_mlp_pkg.sv` (`LAYER_N`, `LAYER_W`, `LAYER_I`).
Changing them reshapes the whole accelerator, because the top generates its layers
from those tables.

## Arithmetic inside a layer

This is where bit-exact agreement with a software model is decided. Neuron `o` of a
layer with inputs in format (W_IN, F_IN fraction bits) and its own format (W, F)
computes:

1. `x[i] * w[o][i]`: a full-precision product of W_IN + W bits with F_IN + F fraction
   bits.
2. The bias `b[o]` shifted left by F_IN, so that it has the same scale as the products.
3. The exact sum of those N_IN + 1 terms, in W_IN + W + ceil(log2(N_IN+1)) bits. This
   sum cannot overflow.
4. `requant_act`:
   - an arithmetic right shift by F_IN, which truncates toward minus infinity;
   - saturation to the signed W-bit range;
   - ReLU on hidden layers, which turns negatives into zero.

Nothing is rounded before step 4, so the only loss of precision per layer is one
truncation and, where needed, one clip. Each neuron reports two flags:
- `sat`: the result was clipped to the range;
- `clamp`: the ReLU zeroed it.

The top ORs the saturation flags of all layers and delays them to line up with the
output vector, giving the diagnostic `sat_any`.

The word widths come from the published design. The truncation and saturation modes
and the ReLU are this design's assumptions: the source does not give the rounding
mode, the overflow mode or the activation function. Truncation is what hls4ml-
generated code does by default. Saturation is chosen over wrap-around because a wrapped
pulse amplitude would be far worse than a clipped one.

## Pipeline and timing

Every layer takes exactly `LAYER_LAT` = 5 cycles, and the seven layers total
`TOTAL_LAT` = 35:

| cycle in layer | work |
|---|---|
| 1 | all products and the aligned biases are registered |
| 2–4 | the per-neuron `adder_tree` (12 terms → 4 levels of adders, with 3 registers placed after levels 2, 3 and 4) |
| 5 | requantise + activation, registered output |

The published design gives only the 35-cycle total. Splitting it evenly over the seven
layers is this design's choice. `adder_tree` spreads any number of registers evenly
over its ceil(log2 N) levels. The first layer has only two terms (one product, one
bias), and it gets plain delay registers after its single adder so that it still
takes 5 cycles.

There is no back-pressure. `in_valid` is sampled every cycle, and `out_valid` follows
it exactly 35 cycles later. A sweep of 100 angles therefore takes 135 cycles (675 ns).
The data registers load only on valid cycles, so the outputs hold their last value
between results. In the datapath only the valid bits, flags and counters are reset.

## Loading the parameters

| signal | meaning |
|---|---|
| `cfg_we` | write strobe |
| `cfg_addr[9:0]` | word address 0 … 782 |
| `cfg_wdata[15:0]` | value, right-aligned two's complement in the target layer's format; only the low W bits are kept |

The words are packed layer after layer, starting with layer 1. Within a layer, neuron
`o` owns `N_IN + 1` consecutive words: its weights for inputs 0 … N_IN-1, then its bias.

| layer | first address | words |
|------:|--------------:|------:|
| 1 | 0   | 8   |
| 2 | 8   | 40  |
| 3 | 48  | 99  |
| 4 | 147 | 132 |
| 5 | 279 | 132 |
| 6 | 411 | 132 |
| 7 | 543 | 240 |

Reset clears every parameter. A write takes effect on the next clock edge. Weights must
not change while inferences are in flight. The `busy` output is high while any are,
and assertions in `qc_mlp_accel` flag two mistakes: a write while `busy` or `in_valid`
is high, and a write beyond word 782. To turn trained floating-point values into
words, multiply each by 2^F of its layer (F = W − I), truncate, and clip to W bits.

## Files

| file | content |
|---|---|
| `rtl/qc_mlp_pkg.sv` | network tables, formats, latency, configuration bus type `cfg_wr_t`, address-map functions |
| `rtl/qc_mlp_accel.sv` | top: input encoding, chain of seven layers, `sat_any`, `busy`, bus assertions |
| `rtl/dense_layer.sv` | one fully-parallel layer (products, adder trees, requantisation) |
| `rtl/adder_tree.sv` | pipelined reduction tree with evenly placed registers |
| `rtl/requant_act.sv` | truncate, saturate, ReLU |
| `rtl/layer_params.sv` | weight/bias registers and their address decode |
| `tb/mlp_ref_pkg.sv` | bit-true reference arithmetic, written with integer division instead of shifts |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. For example,
the end-to-end test:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
    rtl/qc_mlp_pkg.sv tb/mlp_ref_pkg.sv tb/tb_qc_mlp_accel.sv --top-module tb_qc_mlp_accel
./obj_dir/Vtb_qc_mlp_accel
```

- **`tb_qc_mlp_accel`** runs the accelerator at its real size. It loads all 783
  parameters with random values and runs three phases:
  - the 100-angle evaluation grid (beta = −π + 2πk/100, k = 1 … 100), back to back;
  - 600 random angles with random gaps;
  - a second, full-range parameter set, then the grid again.

  It checks each output bit-exactly against a reference forward pass, and checks that
  each result arrives exactly 35 cycles after its input. It also checks `sat_any` and
  `busy`. It fails if any of these never happened: back-to-back results, input gaps,
  saturation, ReLU clamping, a parameter reload, outputs that vary with beta. It runs
  in well under a second.
- **`tb_dense_layer`** tests layers shaped like the first, a hidden and the output
  layer, sharing one bus.
- **`tb_adder_tree`**, **`tb_requant_act`** and **`tb_layer_params`** test their
  modules alone. They cover latency, odd term counts, edge values and address decode.

The random weights check that the arithmetic is exact. They do not produce meaningful
pulses. With the trained parameters, the network's pulses should reach a gate fidelity
above 0.99 against the ideal rotation, which is the published result. That cannot be
reproduced without those parameters.

## How far it follows the original, and where it departs

Taken from the published design:
- the network shape 1-4-8-11-11-11-11-20 (783 parameters);
- the per-layer word widths 14, 12, 10, 10, 10, 10, 12, which are the widths left after
  the authors' final hand edit of the third and output layers;
- integer bits 2, and 0 for the output layer;
- a fully parallel pipeline with initiation interval 1 and 35-cycle latency at a 5 ns
  clock.

This design's own choices:
- **Parameters in registers**, loaded over `cfg_*`, where the original has constants.
  In an FPGA this costs more area than the original's 99 % of DSPs and 62 % of LUTs on
  the Artix-7, because constant multipliers simplify and register-fed ones do not.
  Turning the registers into constants (tie `layer_params` outputs to a table) gives
  the original structure back.
- **Input encoding**: beta/π in ap_fixed<14,2>. A two-bit integer part cannot hold π,
  and the source does not say how beta is scaled.
- **ReLU hidden activations, linear output, truncation with saturation**, as described
  above.
- **Even 5-cycle layers**: the original tool schedules stages on its own, so the
  cycle at which a given layer finishes may differ. The total latency is the same.
- **`busy`, `sat_any` and the bus assertions**: additions for a host.

Not built:
- the earlier, larger 16-bit model (seven hidden layers, 1,040 parameters);
- the intermediate uniform 10/11-bit version;
- the branched model (a shared 24-neuron layer feeding 20 small branches, 24→2→1 each);
- the larger high-fidelity models.

Those are baselines or future work, not the proposed accelerator. The top generates
any chain of dense layers from the package tables. The 1,040-parameter 16-bit model
therefore compiles after an edit of the package alone:
- `N_LAYERS` = 8;
- `LAYER_N` = 1,4,8,12,12,12,12,12,20;
- all `LAYER_W` = 16;
- all `LAYER_I` = 2;
- `CFG_ADDR_W` = 11, because 1,040 words need an 11-bit address.

The testbench tables would need the same edit. The branched model would need a
different top.
