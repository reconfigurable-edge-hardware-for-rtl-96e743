# Float32 dataflow processor for MLP-based intrusion detection

An edge node watching network traffic has to classify every packet, or every flow record, as
benign or malicious, and it has to keep up with line rate. This design does that with three
small multilayer perceptrons (MLPs) built as fixed hardware, one pipeline per classification
target. All three read the same 24-feature vector:

| model       | question answered                                  | topology          |
|-------------|----------------------------------------------------|-------------------|
| Attack      | is this traffic an attack at all?                  | 24 - 32 - 64 - 2  |
| Category    | which attack family (e.g. DoS, reconnaissance, theft, none) | 24 - 32 - 64 - 4  |
| Subcategory | which specific attack (e.g. TCP/HTTP DoS, service scan, OS fingerprinting, keylogging, data theft, none) | 24 - 32 - 64 - 7  |

The two hidden layers use ReLU. The last layer is linear and is followed by a Softmax. All
arithmetic, activations included, is IEEE-754 single precision (Float32). The design follows
an FPGA dataflow accelerator that was produced with a high-level-synthesis flow for the
BOT-IoT dataset. This RTL rebuilds its architecture from the published description: the
topology, Float32 throughout, a reuse factor of 4, and a fully unrolled Softmax. Where that
description is silent, the choices are documented below and in each file's header.

## The reuse factor: how a layer spends its multipliers

The main hardware trade-off is how many multipliers a fully connected layer gets. A layer with
`N_IN` inputs and `N_OUT` outputs needs `N_IN*N_OUT` multiply-accumulates (MACs) per packet.
The design uses a **reuse factor** of `REUSE = 4`. Each multiplier ("compute unit") is used for
4 MACs in 4 consecutive cycles, so a layer has `N_IN*N_OUT/4` multipliers:

| layer | MACs | multipliers (per model) |
|-------|------|-------------------------|
| 24 -> 32 | 768 | 192 |
| 32 -> 64 | 2048 | 512 |
| 64 -> 2 / 4 / 7 | 128 / 256 / 448 | 32 / 64 / 112 |

`dense_layer` splits the inputs across the 4 steps by interleaving. In step `k` (0..3), output
neuron `j` multiplies input `i = p*4 + k` for `p = 0 .. N_IN/4-1` by its weight. It adds those
`N_IN/4` products, one after another, to a running sum. In step 0 the running sum starts from
the bias; in later steps it starts from the neuron's accumulator register. After step 3 the
activation is applied and the vector is registered at the output. The weights are stored as
`w_mem[step][neuron][p]`, so each step reads one wide row. This is the layout a block-RAM
implementation would use.

Timing of one layer: a vector taken in cycle `t` is computed in cycles `t+1 .. t+4` and is valid
at the output from cycle `t+5`. The next vector can be taken in cycle `t+4`, so a layer takes one
vector every `REUSE` cycles. If the output register is still occupied when step 3 is reached,
the layer waits in step 3 (a stall) until the output is taken.

## Dataflow between layers

Each model (`mlp_ids`) is four stages joined by valid/ready vector streams:
`dense 24->32 (ReLU) -> dense 32->64 (ReLU) -> dense 64->N (linear) -> softmax`. The stages work
on different packets at the same time, so the pipeline as a whole takes one packet every 4
cycles. Latency is `3*(REUSE+1)+1 = 16` cycles from the cycle a packet is taken to the first
cycle its probabilities are valid. Back-pressure on the result stream propagates stage by stage
to the input.

`ids_dfp_top` broadcasts one input stream to the three models. It takes a packet only in a
cycle where all three can accept it, so the three result streams stay in packet order even when
they are drained at different speeds. A held result stream eventually stalls the common input.

## The Float32 Softmax

The Softmax is fully unrolled: all N lanes are parallel hardware, and the layer registers its
result one cycle after it takes the logits. It computes
`y_i = exp(x_i - max) / sum_j exp(x_j - max)`:

1. a comparator chain finds the largest logit;
2. `fp32_add` subtracts it from every logit, so every exponent argument is <= 0 and the sum lies
   in [1, N];
3. `fp32_exp` computes each exponential. It converts x to fixed point (32 fraction bits) and
   multiplies by log2(e). It then splits the result into an integer n and a fraction f, and
   evaluates 2^f with a degree-9 Taylor polynomial whose coefficients are
   `round(ln2^k / k! * 2^30)`. The result is 2^n * 2^f, within 4 units in the last place
   (ulp);
4. an adder chain sums the exponentials, `fp32_recip` inverts the sum (correctly rounded), and
   one `fp32_mul` per lane scales each exponential.

Subtracting the maximum, and using a reciprocal plus multiplications instead of N divisions,
are choices of this design.

## Float32 operators

`fp32_mul`, `fp32_add`, `fp32_exp` and `fp32_recip` are combinational. Multiplication, addition
and reciprocal are correctly rounded (round to nearest, ties to even). Subnormal inputs are read
as zero and subnormal results are flushed to zero. Overflow gives infinity. NaN inputs, 0*inf and
inf-inf give the canonical quiet NaN. The helpers `fp32_gt` (ordering) and `fp32_relu` are in
`ids_pkg`.

## Loading the trained parameters

The trained weights of the original models were never published, so the design holds its
parameters in writable memories and exposes one write port, `w_en` plus a `wload_t` word from
`ids_pkg`:

| field | meaning |
|-------|---------|
| `model`   | `MODEL_ATTACK`, `MODEL_CATEGORY`, `MODEL_SUBCATEGORY` |
| `layer`   | 0, 1, 2 = first, second, output dense layer |
| `is_bias` | 1: write bias `row`; 0: write weight `[row][col]` |
| `row`     | output neuron |
| `col`     | input index |
| `data`    | binary32 value |

A layer computes `y[row] = act(b[row] + sum_col W[row][col] * x[col])`. Write the parameters
while no packet is in flight. The accelerator this RTL follows fixed its parameters at
synthesis, so it could not update them in the field. The write port is this design's addition,
and it also makes the design a runtime-updatable IDS. Per model, 3042 / 3172 / 3367 words are
written (Attack / Category / Subcategory).

## Files

| file | contents |
|------|----------|
| `rtl/ids_pkg.sv` | binary32 type, layer sizes, reuse factor, `wload_t`, `fp32_gt`, `fp32_relu` |
| `rtl/fp32_mul.sv`, `fp32_add.sv`, `fp32_exp.sv`, `fp32_recip.sv` | Float32 operators |
| `rtl/dense_layer.sv` | fully connected layer with parameter memory and reuse factor |
| `rtl/softmax_layer.sv` | unrolled Float32 Softmax |
| `rtl/mlp_ids.sv` | one MLP pipeline |
| `rtl/ids_dfp_top.sv` | top: three MLPs on one input stream |
| `tb/tb_*.sv` | self-checking testbenches; `tb_fp_pkg` (binary32/real conversion, rounding) and `tb_mlp_ref_pkg` (double-precision reference MLP) are shared |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/ids_pkg.sv tb/tb_fp_pkg.sv \
    tb/tb_mlp_ref_pkg.sv tb/tb_ids_dfp_top.sv --top-module tb_ids_dfp_top
./obj_dir/Vtb_ids_dfp_top
```

Verilator finds the other modules through `-Irtl -Itb` (one module per file, named after it).

What is checked:

* the operators against double-precision results rounded to binary32, on 20 000 random and
  special operands each (mul, add and reciprocal bit-exact, exp within 4 ulp);
* `dense_layer` at full size (24 -> 32, ReLU) and at 12 -> 3 (linear, REUSE = 2): values within
  the Float32 rounding bound, latency `REUSE+1`, one vector every `REUSE` cycles, stalls under
  back-pressure;
* `softmax_layer` for N = 7 and N = 2, including underflowing lanes and ties: one-cycle latency,
  one vector per cycle, output held under back-pressure;
* `mlp_ids` and `ids_dfp_top` end to end against a double-precision reference network:
  probabilities within 2e-5, same winning class, 16-cycle latency, one packet every 4 cycles,
  back-pressure on every result stream, input stalls, ReLU clamping, and interleaved parameter
  writes to the three models.

**Size limit of the simulations.** The MLP and top-level testbenches use reduced input and
hidden widths: 8-12-16-4 for one MLP, and 8-8-12 with the real 2/4/7 outputs for the top. At full
width, one model is about 1 500 combinational Float32 operators. Building the simulator's C++ for
that takes longer than a unit test can afford, and no full-width simulation of the whole top was
run. The full-width dense layer and Softmax are simulated. All modules are parameterised the same
way at every size, and all files lint at the default (full) sizes.

## How far to trust it, and where it departs from the accelerator it follows

* **Architecture gaps.** The layer sizes, Float32 and the reuse factor come from the original
  description. The following are not described there and are this design's choices: the
  input-to-step mapping, the adder chains, the handshakes, the layer-to-layer buffering (a
  single output register per layer, no FIFOs), the Softmax algorithm and the write port.
* **Timing closure.** Every reuse step is a single cycle, with a Float32 multiply followed by a
  chain of up to 16 Float32 additions. That is far too deep for the original's 100 MHz FPGA
  clock. A real implementation would pipeline the operators, which raises latency but keeps
  one packet every 4 cycles. No synthesis timing has been run.
* **Throughput.** The original reports about 1.1-1.2 M packets/s at 100 MHz, about 86-89 cycles
  per packet. That figure includes the board-level data movement, which is not described. This
  RTL takes one packet every 4 cycles, so the reported number cannot be derived from it.
* **Resource use.** The original used BRAM for the large layers. Here the parameter memories are
  arrays read one full row per cycle, so a synthesis tool will mostly map them to registers
  unless they are restructured.
* **Numerics.** Subnormals are flushed to zero, and summation order differs from any software
  model. Results agree with a double-precision reference to within Float32 rounding but are not
  bit-identical to a software Float32 run.
* **Not included.** The RISC-V soft-core alternative and the board-level integration (processor
  system, DMA or bus interface) are outside this RTL; the top's stream and write ports are where
  they would connect.
