# SPLR-ELM: an online-learning extreme learning machine in RTL

This is synthesizable SystemVerilog for a classifier that learns while it
runs. It is an extreme learning machine (ELM): a fixed random hidden layer,
then a trained linear output layer. The output layer is not solved by the usual
least-squares matrix inversion. It learns one sample at a time with a very
cheap error-driven rule. The design follows the architecture described in
*"Online Learning Extreme Learning Machine with Low-Complexity Predictive
Plasticity Rule and FPGA Implementation"* (Zang, Li, Li). It is written
independently from that description. Where the description is silent, the
choices are this design's own, and they are listed below.

The network has D inputs, M hidden neurons and C outputs. The default is
784-1700-10: 28x28 images, 1700 hidden neurons, 10 classes. For one sample x:

1. **Hidden layer (fixed, random).** Hidden neuron j computes
   `h_j = (sum_k Win(j,k) * x_k + b_j) > THRE`, a binary activation. The random
   weights `Win` are never stored. Each neuron has its own 16-bit LFSR. The
   LFSR is reseeded to the same seed before every sample, so the same weights
   come back each time, generated one per pixel.
2. **Output layer (learned).** Output c computes `o_c = sum_i h_i * W(i,c)`.
   Because h is binary, this is a sum of the weights of the active hidden
   neurons. The prediction is `yhat = argmax_c o_c`.
3. **Learning rule (simplified predictive plasticity, SPLR).** The rule runs
   only for a training sample that is misclassified (`yhat != y`). For every
   active hidden neuron i, `W(i,y) += lr` and `W(i,yhat) -= lr`. Each weight
   is then clipped to `[-wmax, wmax]`. A correct prediction changes nothing.
   There are no multiplies, no traces and no global error signal.

The hardware takes pixels one per cycle and runs all M hidden neurons in
parallel. It then streams the M activation bits one per cycle into all C
output neurons at once. A second pass of the same kind does the weight update.

## Number formats

| quantity | format | notes |
|---|---|---|
| pixel x, biases, sums, o, W, lr, wmax, THRE | signed 16 bit, Q8.8 | the FXP16 format (8 integer + 8 fraction bits) |
| LFSR weight Win | the 16-bit LFSR state read as signed Q1.15, i.e. in [-1, 1) | product `x*w` is shifted right by 15 to return to Q8.8 |
| h | 1 bit | |

Every adder saturates to the signed 16-bit range instead of wrapping. These
are the two MAC adders, the ITP accumulator and the update adder. The
weight-update result is clipped to ±wmax after saturation.

## Hidden layer

Each **hidden neuron** (`hidden_neuron`) contains:

* **PRNG** (`splr_lfsr`): a 16-bit Fibonacci LFSR. It shifts toward bit 15,
  and bit 0 is fed with `s[15]^s[14]^s[13]^s[12]`. The state in the cycle a
  pixel arrives is that pixel's weight, so pixel 0 uses the seed itself. This
  tap set is not maximal-length. Its non-zero states form cycles of 57337,
  8191 and 7 states. The seed function (`splr_pkg::hn_seed`) moves any seed
  off the 7-state cycle. 784 steps per sample stay far inside either long
  cycle.
* **BIAS**: a per-neuron constant, `splr_pkg::hn_bias(j)`, in [-1, 1).
* **MAC** (`hn_mac`): one multiplier and two saturating adders. A
  multiplexer selects between them: sum + product during the D pixel cycles,
  then sum + bias for one cycle.
* **COMP** (`hn_comp`): signed strict comparison `sum > THRE`.

Seeds are a bijective 16-bit hash of the neuron index, so no two neurons
start from the same state. Since 1700 x 784 weight draws exceed the 65535
LFSR states, some neurons' sequences are necessarily shifted runs of
others'; that holds for any 16-bit LFSR per neuron. Biases are a second hash
of the index. The network is defined by
these two functions plus `lfsr_next`. A software model that uses the same
three functions reproduces the hardware bit for bit. The testbench reference
model (`tb/splr_ref_pkg.sv`) does exactly that.

The **hidden layer** (`hidden_layer`) holds M neurons that share the pixel
bus. It also holds an **h buffer** (M flip-flops) and a 1-bit-wide **PISO**
(parallel-in, serial-out register) of length M. The PISO is loaded together
with the h buffer. It is loaded again from the h buffer before the update
pass, so the output layer sees h twice without any recomputation.

## Output layer

Each **output neuron** (`output_neuron`) owns one column of W and contains:

* **weight memory** (`weight_bram`): M x 16 bits, one write port, and a read
  port whose data comes back in the same cycle as the address;
* **address counter**, shared by all three kinds of pass (zero-fill,
  prediction, update);
* **ITP** (`itp`, in-training prediction): adds the word read from memory
  to o when `h_i = 1`;
* **WU** (`wu`, weight update): a read-modify-write pipeline. In cycle t it
  reads word i. It adds `+lr` if this neuron is the target y, or `-lr` if it
  is the wrong prediction yhat. It clips the result and registers the address
  and data. Word i is written in cycle t+1, while word i+1 is being read.
  Words with `h_i = 0` are not written.

The **output layer** (`output_layer`) places C neurons in lock step. It also
holds the **o buffer** (C x 16 bits), the **MAX** block (`argmax`: the lowest
index wins a tie) and a 16-bit-wide **PISO**. The PISO streams the C outputs
after an inference sample. Training samples stream nothing. This is the
train/inference mode switch of the output layer.

## Timeline of one sample

Cycle 0 is the cycle in which the first pixel is accepted. Pixels arrive back
to back here.

| cycles | phase | what happens |
|---|---|---|
| 0 .. D-1 | LOAD | every LFSR steps, every MAC adds `x_k * w_k` |
| D | BIAS | every MAC adds its bias |
| D+1 | COMP | h captured in the h buffer and the h PISO; the ITP sums and address counters are cleared |
| D+2 .. D+M+1 | ITP | bit h_i and word W(i,c) meet in every output neuron, one i per cycle |
| D+M+2 | MAX | o buffer and argmax (yhat, its value) registered; h PISO reloaded; the controller compares yhat with y |
| D+M+3 | result | `res_valid` for inference or for a correctly predicted training sample; a new first pixel may be accepted in this cycle |
| D+M+3 .. D+2M+2 | WU | only for a misclassified training sample: read-modify-write of word i in the y and yhat neurons |
| D+2M+3 | result | `res_valid`, `res_updated = 1`; the last write-back lands in this cycle |

This gives the latencies `D + M + P` (inference) and `D + 2M + P` (worst-case
training) with P = 3 internal cycles (BIAS, COMP, MAX). These are the figures
the paper states. At the defaults they are 2487 and 4187 cycles. Samples do
not overlap: the hidden layer waits while the output layer works. A stall on
the pixel stream (`x_valid` low) simply pauses LOAD.

After reset the controller spends M cycles writing zero into every output
weight. `busy_init` is high during this pass, and `x_ready` stays low.

## Interface of `splr_elm`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, synchronous active-low reset |
| `cfg` | in | `splr_cfg_t` | `lr`, `wmax`, `thre` (Q8.8); keep them stable while a sample is in flight |
| `x_valid`, `x_ready`, `x_data` | in/out/in | 1/1/16 | pixel stream, one pixel per accepted beat, D beats per sample |
| `x_train`, `x_label` | in | 1, ⌈log2 C⌉ | mode and label, sampled with the first pixel |
| `busy_init` | out | 1 | zero-fill pass after reset |
| `res_valid` | out | 1 | one-cycle result strobe |
| `res_pred`, `res_val` | out | ⌈log2 C⌉, 16 | yhat and o_yhat |
| `res_o` | out | C x 16 | all C outputs of the last sample (the o buffer) |
| `res_updated` | out | 1 | the sample changed the weights |
| `o_valid`, `o_data`, `o_index` | out | 1, 16, ⌈log2 C⌉ | serial o stream, C beats after an inference result |

Parameters: `D` (784), `M` (1700), `C` (10), `SEED_BASE` (16'hACE1, mixed
into every seed). The FPGA evaluation also used M = 512 and M = 1024, and the
accuracy study used M = 2048. All of these are parameter changes.

## Where this RTL departs from, or adds to, the paper

* **Seeds, biases, threshold, learning rate, clip bound.** The paper fixes
  these but gives no values. Here, seeds and biases are index hashes, and the
  other three are run-time inputs.
* **LFSR taps.** They are read from the register indices (12–15) printed next
  to the XOR network in the paper's PRNG drawing. The resulting polynomial is
  not maximal-length (see above).
* **Weight scaling.** The LFSR word is used as Q1.15. The paper says only
  that the PRNG feeds the multiplier, with overflow and underflow control.
  That control is implemented here as saturation.
* **MAX placement.** The block diagram draws the argmax after the output
  PISO. The timing diagram, however, has the prediction ready one cycle after
  the last ITP term, and the stated latency has only 3 spare cycles. So MAX
  here reads the C sums in parallel, and the PISO only serves the inference
  output stream.
* **Weight memory.** It is described as block RAM. The drawn timing reads
  data in the same cycle as the address, and the update unit has a single
  register stage, so the memory here has a same-cycle read. In an FPGA flow
  that maps to distributed RAM. The paper's own count of 5 BRAMs could not
  hold 1700 x 10 x 16 bits either.
* **Per-neuron multiplexer of the output neurons.** It is interpreted here as
  the +lr / −lr / no-change selection of the update unit.
* **Added by this design.** The zero-fill pass after reset, the
  valid/ready pixel handshake, the mode and label capture, ties going to the
  lowest index, and strict `>` in the comparator.
* **Throughput.** The latency formulas give 53.5k training frames/s
  (worst case) and 90.1k inference frames/s at 224 MHz. The paper's table
  reports 63.5k and 122.3k. Its 199.7k training frames/s for M = 512 at
  230.7 MHz implies 1155 cycles/sample, below even `D + M + 3`. The RTL keeps
  to the stated formulas.
* **Not built.** The alternative to the fixed threshold (zero-centring the
  projection), and the floating-point, OS-ELM and STDP baselines. The paper
  only compares against those.

## Size

At the defaults, coarse synthesis gives about 58.7k flip-flop bits and
272,000 memory bits (10 x 1700 x 16). There is one 16x16 multiplier per
hidden neuron, which matches the paper's count of one DSP per hidden neuron.
Nearly all the logic is in the hidden layer: each neuron has 32 flip-flop
bits, plus one h-buffer bit and one PISO bit.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=F` and has a cycle watchdog. The reference model
`tb/splr_ref_pkg.sv` is written from the algorithm, not from the RTL. It
models the LFSR weights, saturating Q8.8 arithmetic, argmax and the update
rule with clipping.

* Unit tests: `tb_splr_lfsr`, `tb_hn_mac`, `tb_hn_comp`, `tb_hidden_neuron`,
  `tb_piso`, `tb_hidden_layer`, `tb_weight_bram`, `tb_itp`, `tb_wu`,
  `tb_output_neuron`, `tb_argmax`, `tb_output_layer`, `tb_splr_ctrl`. The
  controller test checks the cycle counts of every phase and both latencies.
* `tb_splr_elm` runs the whole design at D=16, M=24, C=4 on 90 samples drawn
  around four class prototypes. It checks every result, all C outputs, the
  update flag, the serial o stream and the latency. It also counts the
  mechanisms and fails if any never occurred: update on mispredict, correct
  training without update, inference with streaming, weight clipping,
  hidden-sum saturation, pixel stalls, and back-to-back samples.
* `tb_splr_elm_full` runs the same procedure at the default 784-1700-10
  size on 30 samples, with the latencies 2487 / 4187 cycles checked.
  Building it takes about a minute, and it runs in seconds.
* `tb_splr_elm_workload` runs an MNIST-shaped online-learning stream at the
  smallest FPGA size of the evaluation, 784-512-10. The stream is
  long-tailed (class c appears 40 - 2c times), trained for two epochs, then
  followed by 50 inference samples. The images are noisy copies of
  synthetic prototypes. Every result is checked against the model. The
  printed accuracy is for information only; this synthetic task is much
  easier than MNIST.

The tests use synthetic data. No real MNIST-class dataset is simulated, so
they show that the RTL matches the algorithm, not the accuracies the paper
reports.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/splr_pkg.sv tb/splr_ref_pkg.sv tb/tb_splr_elm.sv --top-module tb_splr_elm
./obj_dir/Vtb_splr_elm
```

Replace `tb_splr_elm` with any other testbench name. Testbenches that do not
use the reference model need only `rtl/splr_pkg.sv` in front.

## Files

`rtl/splr_pkg.sv` holds the types, the Q8.8 helpers, the LFSR step and the
seed/bias functions. The modules, bottom up, are `splr_lfsr`, `hn_mac`,
`hn_comp`, `hidden_neuron`, `piso`, `hidden_layer`, `weight_bram`, `itp`,
`wu`, `output_neuron`, `argmax`, `output_layer`, `splr_ctrl` and the top
`splr_elm`.
