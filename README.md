# Approximate bespoke MLP classifier for printed circuits

Printed electronics can put a classifier on a label or a bandage for a fraction
of a cent, but its transistors are microns wide, its clock runs at a few hertz
and a printed battery delivers a few tens of milliwatts. A conventional
multiply-accumulate datapath does not fit in that budget. This design builds a
small multilayer perceptron (MLP) classifier in which:

* every weight and bias is **hardwired**. Each product `a*w` has its own
  constant multiplier, made of shifts and adds. A weight that is a power of two
  costs only wiring. The model is expected to be retrained so that most weights
  are such powers of two.
* the additions are **approximate**. For every product judged to matter little to
  its neuron's sum, only its top `k` bits are added. The lower bits are dropped,
  along with the adder cells they would need.
* signs are handled at **design time**. Every neuron input is non-negative, so
  the sign of each product is known. Positive and negative products are summed
  in two separate unsigned adders. The negative sum is then negated with a
  ones' complement (bitwise NOT) rather than a two's complement.

The method comes from G. Armeniakos, G. Zervakis, D. Soudris, M. B. Tahoori
and J. Henkel, "Co-Design of Approximate Multilayer Perceptron for
Ultra-Resource Constrained Printed Circuits". This is an independent RTL
implementation of the circuit that method produces. Comments in the sources
that say "the paper" refer to that work.

The whole network is combinational and yields one classification per clock
cycle. The RTL is written in generic SystemVerilog. Given a trained model's
integer coefficients as parameters, it elaborates into that model's bespoke
circuit.

## Dataflow

```
 x[0..N_IN-1] (4-bit, unsigned)
      |
 [input register, loads on in_valid]
      |
      v
 hidden layer: N_HID x ax_neuron (ReLU)  -- outputs: unsigned, each as wide as its largest value
      |
      v
 output layer: N_OUT x ax_neuron (no ReLU) -- outputs: signed
      |
      v
 argmax (first maximum wins)
      |
 [output register] --> out_class, out_valid
```

Inside one neuron (`ax_neuron`):

```
 a_i, w_i > 0 --> [x w_i] --+                        a_j, w_j < 0 --> [x |w_j|] --+
                            v                                                      v
      positive bias --> [AxSum] -> Sp                     |negative bias| --> [AxSum] -> Sn
                            |                                                      |
                            |                                                   [NOT]
                            +----------------------> [ + ] <-----------------------+
                                                      |
                                               S' = Sp + ~Sn
                                                      |
                                              [ReLU] (hidden layer only)
```

## The approximate neuron in detail

This is the part that needs the most care. Everything in this section is fixed
when the design is elaborated. No part of it is a run-time setting.

### Sign split and the ones' complement

Each neuron computes `S' = Sp + ~Sn`:

* `Sp` is the sum of `a_i*w_i` over the positive weights, plus the bias if it
  is positive.
* `Sn` is the sum of `a_i*|w_i|` over the negative weights, plus `|bias|` if the
  bias is negative.
* `~` is the bitwise NOT.

`Sp` and `Sn` are each sized for their own largest possible value. The final
adder works at one bit more than the wider of the two, in two's complement. At
that width `~Sn` equals `-Sn-1`, so:

    S' = Sp - Sn - 1

The result is therefore one LSB below the exact dot product. That error is the
price of not adding the `+1` of a two's complement. Both adder trees are
unsigned, so no product needs sign-extension cells. A neuron with no negative
weight and no negative bias has no negative side at all. For such a neuron
`S' = Sp`, with no `-1`.

### Which products are approximated

Each product gets a significance score when the design is elaborated:

    G_i = | w_i * E[a_i] / sum_j( E[a_j] * w_j ) |

Here `E[a_i]` is the mean of input `i` over the training data. It is supplied
as the integer parameter `E1` (network inputs) or `E2` (hidden activations),
in units of that input's LSB. The scale cancels, so only the ratios matter.

* A product with `G_i <= G` is approximated. `G` is a per-layer threshold given
  as a fraction `G_NUM/G_DEN`.
* A product with `G_i > G` is added exactly.
* If the mean dot product is zero, nothing in that neuron is approximated.

The comparison is done in integers: `|w_i E_i| * G_DEN <= G_NUM * |dot|`.

The network uses one `k` (`K`) and one `G` per layer (`G1_*`, `G2_*`). That is
the search space over which a designer sweeps for an accuracy/area Pareto
front.

### How a product is truncated

Product `i` is `n_i = bits(|w_i|) + bits(a_i)` wide. If it is approximated,
only bits `[n_i-1 : n_i-k]` are kept, in their place, and everything below them
is dropped.

Note that `n_i` is computed from the two sizes, not from the product's real
range. For a power of two this means the top kept bit is always zero.
Take `w = 8` with a 4-bit input: `n = 4 + 4 = 8`, but `a*8 <= 120` fits in 7
bits. With `k = 2` only bit 6 survives. So `k` counts bit positions, not
significant ones. The design follows this definition exactly.

The bias is never truncated.

### Widths ("bespoke sizing")

Nothing is sized to a general word length:

* Each multiplier output is `n_i` bits.
* Each adder is sized for its largest possible sum.
* Each hidden activation is as wide as the largest positive sum of its neuron.
  ReLU can never exceed that value.
* The second layer sees each hidden activation at its own width. That width is
  also the `bits(a_i)` used in `n_i`.
* Output-layer values are signed, at the width of the widest output neuron.

`ax_mlp` derives all of these from the coefficients with constant functions. A
synthesis tool then removes whatever is constant.

## Top level: `ax_mlp`

| port        | dir | width          | meaning                                     |
|-------------|-----|----------------|---------------------------------------------|
| `clk`       | in  | 1              | clock                                       |
| `rst_n`     | in  | 1              | asynchronous active-low reset               |
| `in_valid`  | in  | 1              | `x` is valid; captured at this rising edge  |
| `x`         | in  | `N_IN` x 4     | unsigned feature vector (features in [0,1] scaled to 0..15) |
| `out_valid` | out | 1              | `out_class` holds a new result              |
| `out_class` | out | `clog2(N_OUT)` | predicted class                             |

Timing:

* A vector captured at edge *t* is classified at edge *t+1*, with `out_valid`
  high.
* A new vector can be accepted at every edge.
* While `in_valid` is low, the input register and `out_class` hold their values.
  The network then does not toggle, which saves dynamic power.
* Reset clears both registers and `out_valid`.

The clock period must cover the whole network. Printed circuits of this kind
run at around 200 ms per inference.

### Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `N_IN`, `N_HID`, `N_OUT` | 16, 5, 10 | topology |
| `IN_W` | 4 | input width |
| `W1[N_HID][N_IN]`, `B1[N_HID]` | `ax_mlp_pkg::PD_W1`, `PD_B1` | hidden weights and biases, integers |
| `W2[N_OUT][N_HID]`, `B2[N_OUT]` | `PD_W2`, `PD_B2` | output weights and biases |
| `E1[N_IN]`, `E2[N_HID]` | `PD_E1`, `PD_E2` | input means for the significance test |
| `K` | 2 | MSBs kept of approximated products (meaningful range 1..3) |
| `G1_NUM/G1_DEN`, `G2_NUM/G2_DEN` | 1/16, 1/16 | per-layer significance thresholds |

Weights must lie in [-128, 127]. The elaboration stops with an error
otherwise.

Weights and biases are integers in a fixed-point model:

* Hidden layer: 4-bit inputs times 8-bit weights. `B1` is in units of
  input-LSB x weight-LSB.
* Output layer: its inputs are the raw hidden sums, not re-quantised. `B2` is in
  units of the hidden sum's LSB x weight-LSB.

To build a trained model, quantise it in that form and pass the arrays. An
example:

```systemverilog
ax_mlp #(
  .N_IN(5), .N_HID(3), .N_OUT(2),
  .W1('{'{4,-8,1,2,-16}, '{...}, '{...}}), .B1('{3,-5,0}),
  .W2('{'{8,-1,2}, '{-4,16,1}}),           .B2('{0,-12}),
  .E1('{...}), .E2('{...}), .K(2), .G1_NUM(1), .G1_DEN(10), .G2_NUM(1), .G2_DEN(20)
) u_clf (...);
```

### The default network

The default is sized like the Pendigits classifier: 16 inputs, 5 hidden
neurons, 10 classes, 130 products. It is the largest of the reference
benchmarks in products, and the one whose retrained model draws on every
class of coefficient, not only powers of two.

The published work gives no trained coefficients. The default weights, biases
and means in `ax_mlp_pkg` are therefore illustrative values of this design,
with the same flavour as a retrained model: mostly signed powers of two, a few
3s, 5s, 6s, 12s and 24s, and a few zeros. The default circuit computes exactly
what is described here, but it is not a trained digit recogniser.

The reference benchmark set uses these topologies (inputs, hidden, outputs):

* WhiteWine (11,4,7)
* Cardio (21,3,3)
* RedWine (11,2,6)
* Pendigits (16,5,10)
* Vertebral 3C (6,3,3)
* Balance Scale (4,3,3)
* Seeds (7,3,3)
* Breast Cancer (9,3,2)
* Vertebral 2C (6,3,2)
* Mammographic (5,3,2)

Each one is a different bespoke circuit: set the three sizes and its
coefficients.

## Choices made here, and departures

These points are not fixed by the method this design implements. They were
chosen here:

* **Registers and handshake.** There is an input register with a load enable,
  an output register, a one-bit valid pipeline and an asynchronous active-low
  reset. The method itself only asks for a fully parallel circuit that
  completes one inference per cycle.
* **No ReLU on the output layer.** The argmax sees signed values. With a ReLU
  there, all classes with negative scores would tie at zero.
* **Argmax ties** go to the lowest class index. It is built as a linear
  compare-and-select chain.
* **Width of the final adder.** It is one bit wider than the wider of `Sp` and
  `Sn`, which gives the `-1` behaviour described above.
* **Bias.** It is added exactly and is left out of the significance
  denominator.
* **Adder trees** are written as sums and left to synthesis.
* **The offline parts are not hardware and are not included:**
  * coefficient clustering by multiplier area;
  * the area-aware retraining;
  * the sweep over `K` and `G`.

  Their results enter this RTL only as parameter values.

## Files

Files in `rtl/`:

| file | content |
|------|---------|
| `ax_mlp_pkg.sv` | widths, the `mag_bits` helper, default network |
| `bespoke_mult.sv` | constant multiplier `a*|w|` (shift-and-add) |
| `axsum.sv` | approximate multi-operand adder with per-operand K-MSB masks |
| `ax_neuron.sv` | sign split, significance test, two AxSums, ones' complement, ReLU |
| `mlp_layer.sv` | a row of neurons sharing inputs, `G` and `K` |
| `argmax.sv` | class selection |
| `ax_mlp.sv` | top level, width derivation, registers |

Files in `tb/`: one self-checking testbench per module, the ten-topology test
(`tb_workloads.sv`, `tb_mlp_net_check.sv`, `tb_workload_pkg.sv`), plus
`ax_ref_pkg.sv`.
That package is an independent integer model of the arithmetic: truncation by
shifting, `Sp - Sn - 1`, significance computed in floating point.

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and has a cycle
watchdog:

* `tb_bespoke_mult`: exhaustive over the inputs, for zero, one, powers of two,
  odd magnitudes and 127.
* `tb_axsum`: random operands at `k = 2` and `k = 3`, with exact and truncated
  operands mixed.
* `tb_ax_neuron`: four neurons:
  * mixed signs with ReLU;
  * mixed signs without ReLU;
  * positive weights only;
  * mixed input widths with a negative bias.

  It fails if no ReLU clamp or no lossy truncation ever occurred.
* `tb_mlp_layer`: a hidden-style and an output-style layer, every neuron
  checked.
* `tb_argmax`: random values and frequent ties.
* `tb_ax_mlp`: the full default network with no parameter overrides. It
  streams 3000 random vectors, with idle gaps and back-to-back runs, and checks
  every class and the one-cycle latency. It also checks that ReLU clamps, lossy
  truncations, back-to-back inferences and idle cycles all occurred.
* `tb_workloads`: builds the classifier once for each of the ten benchmark
  topologies. The test coefficients come from `tb_workload_pkg`, generated by
  a formula given in that file; they are not trained models. `k` cycles
  through 1, 2 and 3. Each classifier streams 400 vectors, and every class is
  compared with the reference model. This exercises the width derivation at 2
  to 10 classes and 4 to 21 inputs.

Each testbench was also run against a deliberately broken copy of its module
and caught it. The breaks were:

* a missing shift term;
* one extra kept bit;
* a two's complement instead of a ones' complement;
* a wrong bias wiring;
* the wrong tie rule;
* a wrong `k` in the hidden layer.

To run one with Verilator 5:

```sh
verilator --binary --timing -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/ax_mlp_pkg.sv tb/ax_ref_pkg.sv tb/tb_ax_mlp.sv --top-module tb_ax_mlp
./obj_dir/Vtb_ax_mlp
```

Replace `tb_ax_mlp` with any other testbench name.

What has not been verified:

* timing closure;
* area and power in any printed cell library;
* accuracy on real datasets. That needs a trained model's coefficients.
