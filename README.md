# Multiplier-less neurons: RTL of an alphabet-set neural processing engine

A digital neuron spends most of its energy in the multiplier that scales each
input by a synapse weight. This design removes that multiplier. A weight is
read as a few 4-bit groups ("quartets"), and the product of the input `I`
with each quartet is built from a small set of precomputed odd multiples of
`I`, the *alphabets*, by a select, a shift and an add. With the full set
{1,3,5,...,15} every product can be formed; with fewer alphabets only some
quartet values can, and the network is retrained so that its weights use
only those values. In the extreme case the only alphabet is `1·I`, which is
the input itself: no precomputation and no selection are left, and the
neuron computes its products with shifts and adds alone. That is the
*multiplier-less neuron* (MAN), and it is the default configuration of this
RTL.

The SystemVerilog here implements the alphabet set multiplier (ASM), the
four-neuron processing unit in which one bank of alphabets serves four
multipliers, a sigmoid neuron around it, a hardware form of the
weight-rounding rule, and a small engine that runs fully connected
feedforward networks layer by layer. It follows the design in *Multiplier-less
Artificial Neurons Exploiting Error Resiliency for Energy-Efficient Neural
Computing* (Sarwar, Venkataramani, Raghunathan, Roy). That paper describes
the multiplier and the processing unit, but not the engine around them.
Everything outside the multiplier datapath is therefore this design's own,
and is marked as such below.

## 1. Forming a product from alphabets

A weight `W` is a `WT_W`-bit two's complement number. Only its magnitude
`|W|` is multiplied, and the sign is applied at the end. The `WT_W-1`
magnitude bits are cut into quartets, least significant first. With 8-bit
weights there are two quartets of 4 and 3 bits. With 12-bit weights there
are three quartets, P (3 bits), Q and R (4 bits each).

A nonzero quartet value `v` is written as `a · 2^s`, where `a` is odd. `s`
is the number of trailing zeros of `v`, and `a = v >> s`. The quartet's
partial product `v·I` is then the alphabet `a·I` shifted left by `s`.
Example, with `W = 0100_1010`:

| quartet | value | alphabet | shift | partial product |
|---|---|---|---|---|
| low  | 1010 = 10 | 5 | 1 | 10·I |
| high | 0100 = 4  | 1 | 2 | 4·I, weighted by 2^4 |

The adder then forms `4I·16 + 10I = 74I`.

A multiplier built with `NUM_ALPHA` alphabets owns the odd multiples
1, 3, ..., `2·NUM_ALPHA-1`. A quartet is *supported* if its odd part is
among them:

| NUM_ALPHA | alphabets | supported 4-bit quartet values | count |
|---|---|---|---|
| 8 | 1..15 | all | 16 |
| 4 | 1,3,5,7 | 0,1,2,3,4,5,6,7,8,10,12,14 | 12 |
| 2 | 1,3 | 0,1,2,3,4,6,8,12 | 8 |
| 1 | 1 | 0,1,2,4,8 | 5 |

For a weight whose quartets are all supported, the product is exact.

In hardware, each quartet has a decoder (`asm_control`), a multiplexer onto
the alphabet bus (`alphabet_select`) and a shifter with zero gating
(`quartet_shifter`). One adder (`asm_adder`) sums the quartet results with
weights 16^q and negates the sum for a negative weight. With
`NUM_ALPHA = 1` the multiplexer and the alphabet bank reduce to wires. The
same source then describes the multiplier-less neuron, and synthesis keeps
only the shifters and the adder.

If an unsupported quartet reaches a multiplier anyway, `asm_control` raises
`o_unsup` and uses the largest alphabet it has. In the engine this cannot
happen, because every weight is rounded first (section 2). An assertion in
`man_engine` checks this.

## 2. Rounding weights onto the alphabet set

Weights from ordinary training contain unsupported quartets. The method
retrains the network with each weight update rounded so that only supported
quartets remain. `weight_constrainer` is that rounding rule in
combinational logic:

* An unsupported quartet goes to the nearer of its two supported
  neighbours. The midpoint between them rounds up. For the set {1,3}, the
  neighbours of 9, 10 and 11 are 8 and 12, with midpoint 10, so 9 becomes
  8 while 10 and 11 become 12.
* Quartets are treated from the least significant one upward. A quartet
  that rounds up to 16 becomes 0 and carries one into the next quartet.
  That quartet is then checked again with the carry included.
* If the top quartet overflows, the magnitude saturates. It becomes the
  largest value whose quartets are all supported (`0x6C` for {1,3} at 8
  bits).
* The sign is kept. The most negative weight is first taken as
  `-(2^(WT_W-1)-1)`.

Weights that are already supported pass unchanged. That is why the engine
can put one constrainer on each lane of its weight path at no cost in
accuracy. The constrainer also makes the engine safe to feed with
unconstrained weights. The source method does this rounding offline,
during retraining. Having it in hardware is this design's choice.

The source's step-by-step rule says "round down" the least significant
quartet in some cases, but its rounding paragraph says "nearest". This
design rounds to nearest everywhere.

## 3. The processing unit: four neurons, one alphabet bank

In a fully connected layer, every input goes to every neuron. The
processing unit (`cshm_unit`, for computation-sharing multiplication) takes
one input per cycle. It computes that input's alphabets once in
`precomputer_bank` and hands them to `LANES = 4` multipliers, one per
neuron. Each lane also has:

* `neuron_accumulator`: a register that starts from the neuron's bias and
  adds one product per cycle. In the engine it is `IN_W + WT_W + 12` bits
  wide (28 at 8 bits), so no layer that fits the 4096-word buffers can
  overflow it.
* `sigmoid_unit`: a logistic activation. It uses the PLAN piecewise-linear
  approximation, which needs only shifts and adds: `y = |x|/4 + 1/2` below
  1, `|x|/8 + 0.625` up to 2.375, `|x|/32 + 0.84375` up to 5, then 1, and
  `y(-x) = 1 - y(x)`. Its error against the true sigmoid stays below 0.02.
  PLAN steps down by 1/256 where its second and third segments meet. The
  source names only a sigmoid; the choice of PLAN is this design's.

## 4. The engine (`man_engine`, top level)

The source states only that its processing engine received the trained
weights and the test patterns as inputs. Everything in this section is this
design's own choice.

**Storage.** Two `activation_buffer`s of `ACT_DEPTH = 4096` words take
turns: a layer reads its inputs from one and writes its outputs to the
other. A layer table holds up to `MAX_LAYERS = 8` entries, each an input
count and a neuron count (both 1..4096). Weights are not stored on chip.
They arrive on a valid/ready stream, four words per beat.

**Number formats.** Activations are unsigned `IN_W`-bit fractions of 1.
Weights and biases are signed `WT_W`-bit numbers with `WT_FRAC = WT_W-4`
fractional bits, which gives a range of ±8. A bias is shifted left by
`IN_W` so that it matches the product scale. The sigmoid therefore reads
its input with `IN_W + WT_FRAC` fractional bits.

**Use.**
1. While `o_busy` is low, write the layer table (`i_cfg_we`, `i_cfg_layer`,
   `i_cfg_n_in`, `i_cfg_n_out`, `i_cfg_alpha`) and hold `i_num_layers`. Write the input
   pattern into buffer 0 (`i_in_we`, `i_in_addr`, `i_in_data`).
2. Pulse `i_start`. Then supply the weight stream in this order. For each
   layer, and for each group of four neurons `4g .. 4g+3`:
   * one beat carrying the four biases;
   * one beat per input `i`, carrying `w[4g+l][i]` in lane `l`.
   In the last group of a layer, lanes beyond the last neuron are ignored.
   They must still be sent.
3. `o_done` pulses for one cycle after the last layer has been written.
   Read the results combinationally with `i_rd_addr` / `o_rd_data`.

`o_w_adjusted` marks accepted beats in which the constrainer changed a
weight. `o_unsup` should never rise.

**Timing.** If the stream never stalls, a group of neurons takes
`1 + n_in + n_lanes` cycles: one for the bias beat, one per input, and one
write-back per neuron in the group. `o_done` rises in the cycle after the
last write. A 1024-100-10 network therefore takes
25·1029 + 2·105 + 103 = 26 038 cycles. Write-back is not overlapped with the next
group's accumulation. This keeps the sequencer simple and costs at most 4
cycles per group.

**Per-layer alphabet sets.** Small final layers take few of a network's
cycles but influence its output strongly. A network can therefore use the
multiplier-less set {1} in its large early layers and {1,3} or {1,3,5,7}
in its last layers, and recover most of the accuracy lost to {1} at little
energy cost. Each layer-table entry holds `i_cfg_alpha`, the log2 of the
layer's alphabet count (0: {1}, 1: {1,3}, 2: {1,3,5,7}, 3: all eight).
Values above the built `NUM_ALPHA` are clamped. Every lane has one
constrainer per set up to `NUM_ALPHA`, and the layer's entry picks which
one rounds its weights. The multipliers are built once, for `NUM_ALPHA`
alphabets, and are exact for every smaller set. A build with a single
multiplier per alphabet count, which is where the energy saving of the
mixed scheme would come from, is not modelled. With the default
`NUM_ALPHA = 1`, every layer uses {1}.

**Sequencer states.** The states are `S_IDLE`, `S_BIAS` (waiting for the
bias beat), `S_MAC` (one input per accepted beat) and `S_WRITE` (one
neuron output per cycle). After a group's last write, the sequencer moves
to the next group, to the next layer (swapping the buffers), or back to
idle.

## 5. Parameters

| parameter | default | meaning |
|---|---|---|
| `IN_W` | 8 | activation width; the source evaluates 8 and 12 |
| `WT_W` | 8 | weight width; 8 gives 2 quartets, 12 gives 3 |
| `NUM_ALPHA` | 1 (engine), 4 (stand-alone multiplier blocks) | alphabet count: 1 (multiplier-less), 2, 4 or 8 |
| `LANES` | 4 | neurons per processing unit |
| `WT_FRAC` | `WT_W-4` | fractional bits of weights and biases |
| `ACC_W` | `IN_W+WT_W+log2(ACT_DEPTH)` = 28 | accumulator width |
| `ACT_DEPTH` | 4096 | words per activation buffer |
| `MAX_LAYERS` | 8 | layer table entries |

`IN_W = WT_W = 12` with `NUM_ALPHA` of 1, 2 or 4 gives the 12-bit neurons.
`NUM_ALPHA = 4` gives the {1,3,5,7} multiplier.

## 6. Networks and what fits

These networks were used to evaluate the method. All of them fit the
engine's storage and control at the defaults, except the TiCH network,
whose input size is not published, and the last two in the list.

* **MNIST 2-layer perceptron (8-bit), 1024-100-10.** Its 103 510 synapses
  match 1025·100 + 101·10, counting biases. It fits, and is simulated end to
  end.
* **Face detector, 1024-100-2.** It fits, and is simulated end to end at 8
  bits. The 12-bit build is simulated at the same shape with four alphabets.
* **SVHN 6-layer perceptron** (1560 neurons, 1 054 260 synapses). The layer
  split is not published. A 32×32×3 colour input (3072 words) cannot reach
  that synapse count with 1560 neurons in 6 layers, because the first layer
  alone would take too much of it. A 1024-word grey-scale input can, for
  example 1024-700-280-220-220-130-10. That shape fits and is simulated end
  to end at the defaults in 265 301 cycles. Its hidden sizes are an
  assumption.
* **TiCH 5-layer perceptron** (786 neurons). Every layer fits, but its
  input size is not published.
* **LeNet CNN for MNIST** does not run. It needs convolution and pooling,
  and the engine sequences only fully connected layers.
* **Mixed 1/2/4-alphabet networks** need `NUM_ALPHA = 4`. The default
  build rounds every layer to {1}. The 12-bit, four-alphabet build is
  simulated with the SVHN sets {1},{1},{1},{1},{1,3},{1,3,5,7} on the
  1024-700-280-220-220-130-10 shape above. It is also simulated on
  1024-100-2 with {1} then {1,3,5,7}.

## 7. Files

| file | content |
|---|---|
| `rtl/man_pkg.sv` | defaults, quartet count, supported-value test |
| `rtl/precomputer_bank.sv` | alphabets (2k+1)·I by shift-add |
| `rtl/asm_control.sv` | quartet → alphabet index, shift, zero, unsupported |
| `rtl/alphabet_select.sv` | alphabet multiplexer |
| `rtl/quartet_shifter.sv` | shift 0..3 with zero gating |
| `rtl/asm_adder.sv` | sum of quartet products, sign |
| `rtl/asm_multiplier.sv` | one ASM (MAN when `NUM_ALPHA = 1`) |
| `rtl/cshm_unit.sv` | bank shared by four ASMs |
| `rtl/neuron_accumulator.sv` | bias-initialised weighted sum |
| `rtl/sigmoid_unit.sv` | PLAN sigmoid |
| `rtl/weight_constrainer.sv` | rounding onto the alphabet set |
| `rtl/activation_buffer.sv` | layer activation memory |
| `rtl/man_engine.sv` | top level: engine |
| `tb/tb_ref_pkg.sv` | reference models used by the testbenches |
| `tb/tb_<module>.sv` | self-checking testbench per module |
| `tb/tb_man_engine_asm12.sv` | engine with 12-bit, four-alphabet neurons |

## 8. Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops. For
example, to run the engine test at default parameters:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/man_pkg.sv tb/tb_ref_pkg.sv tb/tb_man_engine.sv \
    --top-module tb_man_engine -o sim
./obj_dir/sim
```

Replace the testbench name to run any other one. All testbenches run in
seconds.

## 9. How far it is checked

* **Multiplier blocks.** The leaf testbenches compare against
  multiplication with `*`, or against explicit tables of supported values.
  They never use the RTL's own decode. `tb_asm_multiplier` checks
  exactness for random supported weights with 1, 2 and 4 alphabets at 8 and
  12 bits. It also checks the worked example above.
* **Constrainer.** It is checked exhaustively at 8 bits for three
  alphabet sets, against a separately written nearest-value search.
* **Sigmoid.** It is checked against `1/(1+e^-x)` and against PLAN in real
  arithmetic.
* **Engine.** `tb_man_engine` runs networks of 13-7-5-3, 1024-100-10,
  1024-100-2 and 1024-700-280-220-220-130-10 against a bit-exact reference forward pass. It checks the
  cycle count, and makes sure that each of the following occurs: stream
  stalls, rounded weights, partial neuron groups, buffer swaps, and
  saturated and mid-range activations. `tb_man_engine_asm12` runs the same
  procedure for 12-bit, four-alphabet neurons with a different alphabet set
  per layer.
* **Not checked.** Timing closure at the source's 3 GHz (8-bit) and 2.5
  GHz (12-bit) clocks is not checked. Power and area are not checked
  either. The RTL is unpipelined, with a combinational multiplier, adder and
  sigmoid path between the buffer read and the accumulator.
* **Not reproduced.** Accuracy on the real data sets needs the trained
  weights, which are not part of this RTL.
