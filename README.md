# A fault-tolerant AES S-box built as an integer neural network

A fault attack corrupts one value inside a cipher while it runs, for example with a
laser pulse or a clock glitch. For AES a single well-placed fault can be enough to
recover the key. The usual S-box, a 256-entry table or its logic
equivalent, is fully deterministic: any corruption of the table or of its control
flow changes the output.

This design computes the key-dependent first-round function

    f(x) = SBox(x xor k)        (x: plaintext byte, k: one secret key byte)

with a small neural network instead. The network classifies the input byte: its
256 output neurons stand for the 256 possible output bytes, and the answer is the
index of the largest one. A network has *partial fault tolerance*: if one weight or
bias is corrupted, the winning output usually stays the largest. The other outputs
merely shift by an amount smaller than the winner's lead. Training with constraints
on the parameters makes those margins large, so that almost no single-parameter
fault changes the answer. The key k is not stored anywhere as a byte: it exists only
implicitly in the parameters.

This RTL implements the hardware of that scheme: the iterative, area-oriented
datapath of the 8-128-256 network that Alam et al. describe in "Enhancing Fault
Tolerance of Neural Networks for Security-Critical Applications". The trained
parameter values are not published. The design therefore loads its parameters
through a port, and the testbenches use a network constructed by hand that
computes the S-box exactly (see *A network that computes the S-box*).

## The network

| layer  | neurons | function |
|--------|---------|----------|
| input  | 8       | the bits x_0 .. x_7 of the input byte (x_i = bit i, I0 = LSB) |
| hidden | 128     | h_j = ReLU( sum_i x_i * w1[i][j] + b1[j] ) |
| output | 256     | y_k = sum_j h_j * w2[j][k] + b2[k]  (linear) |
| result | 1 byte  | argmax_k y_k |

The network is trained with a softmax output layer. The hardware drops the softmax:
softmax is monotonic in y_k, so the argmax is the same and no exponentials are needed.
All parameters are integers. Each trained real value is scaled by 2, which keeps one
fractional bit, and then rounded. The source reports this precision as giving the
fewest faults overall.

## Datapath

```
 x[7:0] ──► LH: hidden layer ──► ReLU ×128 ──► LO: output layer ──► ArgMax ──► y_out[7:0]
            (1 neuron / clock)                 (1 neuron / 17 clocks)  (MAXVAL, MAXIDX)
                 ▲                                    ▲                     ▲
                 └──────────── top_control FSM (IDLE → RUN_LH → RUN_LO → FINISH)
```

Both layers are *iterative*: one set of arithmetic serves all neurons of the layer in
turn, and each layer reads its parameters from its own memory, one neuron's row per
iteration.

### Hidden layer (`lh_layer`)

The inputs are single bits, so multiplying a weight by x_i is the same as letting the
weight through or not: eight AND gates select w1[i][j] where x_i = 1. The eight
selected 7-bit weights are added as a small tree:

1. A first **SIMD DSP adder** (`dsp_simd_adder`, 4 lanes) adds the pairs
   AND7+AND3, AND6+AND2, AND5+AND1 and AND4+AND0. This gives four 8-bit sums.
2. A second one (2 lanes) adds those pairwise. This gives two 9-bit sums.
3. A plain adder adds the two 9-bit sums and the 9-bit bias b1[j]. The result is the
   11-bit pre-activation h_j.

A SIMD adder packs its lanes side by side into one wide word. Above each lane sits one
zero *padding* bit, which absorbs that lane's carry, so a single wide addition yields
every lane sum without carries or borrows crossing lanes. This is how one DSP slice
performs several narrow additions.

The pre-activation enters the top of a 128-entry **shift buffer**, and the whole
buffer shifts one place toward entry 0 on each iteration. After 128 iterations entry
j holds h_j. The buffer outputs all 128 values in parallel to 128 ReLUs (`relu`),
which feed the output layer.

### Output layer (`lo_layer`): the part that needs a schedule

Each output neuron needs 128 multiplications, and there are only 8 multipliers, so
each neuron is computed in 16 *executions*. The 128 activations and the neuron's 128
weights are cut into 8 groups of 16 consecutive indices. Multiplier g serves group g,
indices 16g .. 16g+15. In execution t (0..15), two 16-to-1 multiplexers give
multiplier g the pair

    h[16g + t]   and   w2[16g + t][k].

| clock (neuron k, relative) | memory | multiplexers / multipliers | adder tree | accumulator |
|---|---|---|---|---|
| 0  | read row k: 128 weights and the bias | – | – | – |
| 1  | – | execution t = 0 | – | – |
| 2  | – | t = 1 | sum of the 8 products of t = 0 | – |
| 3  | – | t = 2 | t = 1 | acc = b2[k] + tree(t=0) |
| …  | | | | acc += tree(t) |
| 16 | – | t = 15 | | |
| 17 | read row k+1 | (neuron k+1, t = 0 on the next clock) | tree(t = 15) | … |
| 18 | | | | y_k = acc + tree(15), registered with index k (valid in clock 19) |

The multipliers (`mul20`) take 20-bit signed operands. Each is built from four
half-width partial products, as a multiplier spread over several DSP slices would be:

    a·b = ah·bh·2^20 + (ah·bl + al·bh)·2^10 + al·bl

Here ah and bh are the signed upper halves and al and bl the unsigned lower halves.
Activations are zero-extended to 20 bits and weights sign-extended. A binary adder
tree (8 → 4 → 2 → 1) sums the eight 40-bit products. A 48-bit accumulator, initialised
with the bias, sums the 16 tree outputs. The bias is read together with the weight
row and travels down the pipeline with the neuron's tags. The next neuron's row read
can therefore start while the last products of the current neuron are still in the
pipeline, and one neuron costs exactly 17 clocks.

The neuron counter k addresses the weight and bias memories. Its value goes with
y_k to the ArgMax block.

### ArgMax (`argmax`)

A comparator checks each y_k against the register MAXVAL. When y_k is strictly larger,
or is the first value of the pass, MAXVAL takes y_k and MAXIDX takes k. After neuron
255, MAXIDX holds the result. Because the comparison is strict, a tie goes to the
lowest index. The top-level FSM then copies MAXIDX to `y_out`.

### Control (`top_control`)

A four-state FSM sequences one inference:
- A `start` pulse in IDLE starts the hidden layer and clears the ArgMax search.
- The hidden layer's `done` starts the output layer.
- The output layer's `done` loads the output register.
- `done` pulses one clock later.

A `start` while busy is ignored. Assertions check that a layer only reports
completion while the FSM waits for it, that the two layers never run at once, and
that parameters are not written during an inference.

## Timing

| phase | clocks (defaults) | formula |
|---|---|---|
| hidden layer, start → done | 132 | N_HID + 4 |
| output layer, start → done | 4356 | 17·N_OUT + 4 = (N_HID/8 + 1)·N_OUT + 4 |
| output register, done pulse | 1 | |
| **one inference, start → done** | **4489** | N_HID + (N_HID/8 + 1)·N_OUT + 9 |

The source reports 96,910 clocks for its 8-128-256 implementation, about 23.7 clocks
per execution of the output layer against 1 here. It does not say how an execution is
scheduled in its design. This RTL instead pipelines the memories, multipliers and
adders so that one execution issues per clock. Its latency is therefore about 22 times
lower. The arithmetic and the schedule of executions (8 multipliers, 16 executions per
neuron, 256 neurons) follow the source.

## Resources, against the source's FPGA figures

Parameter storage is 128×8×7 + 128×9 + 256×128×8 + 256×16 = 274,560 bits, about 7.5
36-kbit block RAMs; the source reports 9 block RAMs for its 8-128-256 design. The
arithmetic maps onto 8 multipliers × 4 partial products plus 2 SIMD adders, i.e. 34
DSP-slice operations, against the 33 DSP slices reported. These are counts of
operations in the RTL, not results of an FPGA implementation.

## Parameters and number formats

| name (`nn_pkg`) | value | origin |
|---|---|---|
| N_IN, N_HID, N_OUT | 8, 128, 256 | source |
| N_MUL (parallel multipliers) | 8 | source |
| MUL_W (multiplier operand) | 20 bits | source |
| operands of the hidden layer's final adder | 9 bits | source |
| W1_W (first-layer weight) | 7 bits signed | derived: two adder levels below the 9-bit adder |
| B1_W (hidden bias) | 9 bits signed | own choice |
| H_W (hidden pre-activation) | 11 bits signed; 10 bits after ReLU | follows from the above |
| W2_W (second-layer weight) | 8 bits signed | own choice: 128×256×8 bit = 262 kbit fits the 9 block RAMs (324 kbit) the source reports |
| B2_W (output bias) | 16 bits signed | own choice |
| ACC_W (output accumulator) | 48 bits | own choice (DSP accumulator width) |

`nn_sbox_top` and the layers take `N_HID_P` and `N_OUT_P` parameters. Hidden sizes of
8, 32 and 64, used by the smaller networks of the source's comparison, are tested.
N_HID_P must be a multiple of 8 and at most 128 (the `prm_col` field is 7 bits), and
N_OUT_P must not exceed 256, since `y_out` is one byte. A smaller network can also run on the default build: give the unused hidden
neurons zero weights and bias, and they contribute nothing.

## Loading parameters, and injecting faults

All four parameter memories (`weight_mem`) are written one value per clock through
the top-level port, while `busy` is low:

| `prm_sel` | memory | `prm_row` | `prm_col` | `prm_data` bits used |
|---|---|---|---|---|
| 0 | w1 | hidden j | input i | [6:0] |
| 1 | b1 | hidden j | – | [8:0] |
| 2 | w2 | output k | hidden j | [7:0] |
| 3 | b2 | output k | – | [15:0] |

A full load takes 34,176 writes. In an FPGA the memories would instead be initialised
with the trained values at configuration. The same port is how the testbenches
reproduce the fault model the network is designed for: one parameter takes a wrong
value, whether by a bit flip, several bit flips, zero or a random value, while
everything else is intact.

## A network that computes the S-box

The testbenches need parameters that give a known answer without a trained network.
They use a network that can be built by hand. Let c = N_HID/8.

- Hidden neuron j copies input bit i = j mod 8 with weight 2 and bias 0, so
  h_j = 2·x_i and each input bit has c copies.
- For output neuron k, let p = SBox⁻¹(k) xor key. Its weights are +1 from the copies
  of bits where p is 1 and −1 from the others. Its bias is −c·Σ_i (2p_i − 1).

Then y_k = c·(8 − 2·dist(x, p)), where dist is the Hamming distance. This is largest,
and uniquely so, when p = x, that is when k = SBox(x xor key). The winner leads the runner-up (Hamming distance 1) by
2c = 32 at the default size. The testbench reference computes the S-box from its
definition: the inverse in GF(2⁸) followed by the affine map. No table is copied.

This network stands in for the trained one. It has the right shape and computes the
right function, but it was not trained under the fault-tolerance constraints. Its
fault statistics therefore say nothing about those of the source's trained model.

## Verification

Every testbench compares the design with values computed independently, prints
`TB_RESULT checks=… failures=…` and stops itself through a watchdog.

| testbench | what it checks |
|---|---|
| `tb_weight_mem` | random writes and row reads against a shadow array, 1-clock read latency |
| `tb_dsp_simd_adder` | all lanes for random and extreme operands (no carry across lanes), latency, hold |
| `tb_relu` | all 128 lanes, including 0, −1 and the range limits |
| `tb_mul20` | products against 64-bit arithmetic, corner operands, latency, hold |
| `tb_argmax` | 60 streams with ties, all-negative values and gaps in `valid` |
| `tb_top_control` | order and timing of every control pulse, start while busy |
| `tb_lh_layer` | every buffer entry for random and extreme parameters; latency N_HID + 4 |
| `tb_lo_layer` | every y_k and its index at full size, one y per 17 clocks, latency |
| `tb_nn_sbox_top` | **full size**: S-box for all 256 inputs (key 0x25) and latency 4489, random networks against the reference model, ReLU clamping, ArgMax tie, start while busy, a tolerated fault and a fault that changes the answer |
| `tb_nn_sizes` | networks with 8, 32 and 64 hidden neurons at their own build sizes, and 32 zero-padded on the default build; all 256 inputs each |
| `tb_fault_campaign` | single-parameter campaign: 4 parameters of each kind; every single-bit flip, zero, all bits flipped and a random value; 12 inputs each (2496 faulty inferences), every result against the reference model with the same fault; reports faulty outputs per parameter kind |

On the constructed network the campaign finds faulty outputs in every parameter kind.
Output biases are the most sensitive, because the network's margin is small: a flip of
bit 5 or above in an output bias (a change of 32 or more) can match or exceed the
winner's lead of 32. This is expected for an
untrained network and is exactly what the source's constrained training is meant to
prevent.

## Simulating

Each testbench runs with plain Verilator 5 from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
    rtl/nn_pkg.sv tb/tb_nn_pkg.sv tb/tb_nn_sbox_top.sv --top-module tb_nn_sbox_top
./obj_dir/Vtb_nn_sbox_top
```

Replace `tb_nn_sbox_top` with any testbench name; unit testbenches do not need
`tb/tb_nn_pkg.sv`. The full-size end-to-end test takes about 2 s, and the fault
campaign about 20 s.

## Where this departs from the source

- **Parameter memories are writable.** The source labels them ROMs holding trained
  values. Those values are unpublished, so they are loaded through a port.
- **Cycle count.** 4489 clocks per inference against the 96,910 reported (see *Timing*).
- **Hidden buffer size.** The hidden-layer diagram draws a 32-entry buffer (l31..l0);
  the text gives 128 iterations. 128 entries are built.
- **Multiplexer groups.** The output-layer diagram labels most groups with 16 indices
  (l127–l112, …, l63–l48) but the last ones as l11–l8, l7–l4 and l3–l0. The text's
  16 executions per neuron require 16-wide groups throughout, and those are built.
- **Accumulator and output bias.** The diagram takes the adder tree straight to ArgMax
  and draws neither the accumulation over the 16 executions nor the bias; both are
  added here.
- **Hidden bias.** The text says the bias "is added finally". It is the third operand
  of the final hidden-layer adder; the diagram does not draw its path.
- **Widths.** Only the 20-bit multiplier and the 9-bit final-adder operands are given.
  All other widths are own choices (see the table). Trained parameters that do not
  fit them would need wider memories.
- **Precisions of 2 and 3 fractional bits**, which the source also evaluates, double or
  quadruple the parameter values. Whether they fit is unknown without the parameters.
- Ties in ArgMax go to the lowest index; the source does not say.
- Not part of this RTL: the training procedure and its constraints (L2 regularisation
  chosen to satisfy the fault-tolerance conditions), the FPGA primitives themselves
  (DSP slices and block RAMs are written as generic logic), and the laser and
  clock-glitch equipment.

## Files

`rtl/`: `nn_pkg` (sizes, widths, parameter-select enum, latency constants),
`weight_mem`, `dsp_simd_adder`, `lh_layer`, `relu`, `mul20`, `lo_layer`, `argmax`,
`top_control`, `nn_sbox_top` (top).
`tb/`: `tb_nn_pkg` (S-box function and integer reference model), one testbench per
block, `tb_nn_sizes` with its helper `tb_nn_size_runner`, and `tb_fault_campaign`.
