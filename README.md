# A neural-network self-interference canceller in SystemVerilog

A full-duplex radio transmits and receives on the same frequency at the same
time. Its own transmit signal leaks into the receiver, and the leak is millions
of times stronger than the wanted signal. Analog isolation removes most of
it. The rest has to be removed digitally. The receiver knows what it
transmitted, x[n], so it can predict the leak y_hat[n] from the last few
transmitted samples and subtract it: y_c[n] = y[n] - y_hat[n].

This design splits the prediction into two parts:

* a **linear** part: a short complex FIR filter,
  y_lin[n] = sum_l h[l] x[n-l];
* a **non-linear** part, which models the power amplifier, IQ imbalance and
  the like. It is a small fully connected neural network whose inputs are the
  real and imaginary parts of the same L samples.

The RTL computes both parts in parallel, scales the network output by a power
of two, and adds the two estimates. Training the network and the FIR taps is
done offline. The hardware only receives the trained numbers through a write
port.

The design follows the architecture of *"Hardware Implementation of Neural
Self-Interference Cancellation"* (Kurzo et al.).
Its default size is that paper's "equi-performance"
canceller:
* L = 2 taps;
* 4 network inputs, one hidden layer of 8 ReLU neurons (the depth is a parameter), 2 linear outputs;
* 16-bit fixed point;
* 8 multiply-accumulate units in the hidden layer and 4 in the output layer;
* one complex MAC for the FIR.

It takes one new sample every 4 clock cycles, so 320 MHz gives 80 Msamples/s.
The paper's larger "peak-performance" canceller (L = 4, 34 hidden neurons,
18 bits, 40 + 10 MACs, one sample every 7 cycles) is the same RTL with
different parameters.

```
 x[n],y[n] ──► tap delay line ──┬─► NBN stage (hidden, ReLU) ─► IBI stage (output) ─► NN out ─┐
  (valid/stall)  x[n..n-L+1]    │      8 PEs, 2 neurons/cycle     4 PEs, 2 inputs/cycle        │
                                ├─► linear canceller (complex FIR, 1 CPE) ─► FIFO ──────────────┤
                                └─► y[n] ─────────────────────────────────► FIFO ──────────────┤
                                                                                               ▼
                                              y_hat = y_lin + 2^shift · y_nn,   y_c = y - y_hat
```

## The core idea: two ways to schedule a layer, used alternately

A layer computes out[j] = f(b[j] + Σ_i W[j][i]·in[i]). It has NE_in × NE_out
multiplications, and a stage owns N_PE multiply-accumulate processing
elements (PEs). There are two natural ways to share the PEs. The design uses
them alternately, so that a layer can start before the previous layer has
finished.

**Neuron-by-neuron (NBN).** All inputs are present at once. The stage works
through the neurons and completes a few of them at a time.
* If N_PE ≤ NE_in, the PEs split one neuron's dot product. It takes
  ceil(NE_in/N_PE) cycles.
* If N_PE = k·NE_in, then k neurons are done in each cycle, NE_in PEs per
  neuron.
* Finished neurons leave in *beats* of k values. The first beat is ready
  early: ceil(NE_in/N_PE) + 1 cycles after the inputs arrive.

**Input-by-input (IBI).** The inputs arrive a beat at a time. The stage feeds
each beat into all neurons at once. Each PE keeps a small memory of partial
sums, one word per neuron it serves.
* If N_PE = k·NE_out, then k inputs are taken in each cycle.
* All outputs appear together once the last input has been used.

An NBN stage emits neurons in beats of k, and an IBI stage consumes inputs in
beats of k. An NBN stage can therefore feed an IBI stage directly. The IBI
stage starts working when the first beat arrives, instead of waiting for the
whole layer. The hidden layer is NBN and the output layer is IBI.

With the defaults:

| stage | NE_in → NE_out | N_PE | k | work per sample | first output |
|---|---|---|---|---|---|
| hidden (NBN) | 4 → 8 | 8 | 2 neurons/cycle | 4 cycles | 2 cycles |
| output (IBI) | 8 → 2 | 4 | 2 inputs/cycle | 4 beats, 4 cycles | 5 cycles (all outputs) |
| linear FIR | 2 taps | 1 CPE | – | 2 cycles | 2 cycles |

The network path sets the rate: one sample per 4 cycles. The FIR is faster,
and its results wait in a FIFO.

### NBN stage in detail (`nbn_stage`)

Derived sizes:
* K = N_PE/NE_in when N_PE > NE_in, otherwise 1. This is the number of
  neurons per group.
* PPN = N_PE/K, the number of PEs per neuron.
* CPG = ceil(NE_in/PPN), the number of cycles per group.
* NG = ceil(NE_out/K), the number of groups.

The stage works as follows:
1. The input vector is latched.
2. In cycle c of group g, PE p = s·PPN + lane multiplies input c·PPN + lane by
   the weight of neuron g·K + s. The input is zero past the end of the vector.
3. Each PE accumulates into its single partial-sum register. The first cycle
   of a group restarts the sum.
4. After the last cycle of a group, the PE sums go into a pipeline register.
5. The output interface then, for each of the K neurons:
   * adds the PPN sums in an adder tree;
   * adds the bias;
   * saturates the result;
   * applies ReLU.
6. The result goes into the stage's output register. That register is the
   pipeline register between the two stages.

When NE_out is not a multiple of K, the last group is padded. Its padded
neurons are sent as zeros, and the next stage gives them no weight.

Weight memory layout: word (n/K)·CPG + i/PPN, lane (n%K)·PPN + i%PPN holds
W[n][i]. Each word is N_PE values wide, so one read feeds every PE.

### IBI stage in detail (`ibi_stage`)

Derived sizes:
* K = N_PE/NE_out when N_PE > NE_out, otherwise 1. This is the number of
  inputs per beat.
* NPN = N_PE/K, the number of PEs per input slot.
* D = ceil(NE_out/NPN), the number of partial sums per PE.
* NIB = ceil(NE_in/K), the number of beats per sample.

The stage works as follows:
1. A beat is used over D cycles.
2. In cycle d, PE p = s·NPN + lane multiplies input slot s of the beat by
   W[d·NPN + lane][beat·K + s]. It accumulates into word d of its memory. The
   first beat of a sample restarts the sums.
3. When the last beat has been used, the PE values go to a pipeline register.
4. For each neuron, the output interface adds the K slot sums and the bias,
   then saturates and applies the activation (linear at the output).
5. All NE_out outputs are registered together.

Weight memory layout: word (i/K)·D + n/NPN, lane (i%K)·NPN + n%NPN holds
W[n][i].

The IBI stage must use the same beat width K as the NBN stage in front of
it. Both published configurations meet this: K = 2 for the default and K = 5
for the peak configuration. The top checks it at elaboration.

### Deeper networks

The top takes NL hidden layers of NH neurons each. NL must be odd, and the
default is 1. Layer l is one stage:
* even l is an NBN stage;
* odd l is an IBI stage.

So the last layer, the output layer, is always an IBI stage.

The links between stages work differently by type:
* An IBI stage hands its whole output vector to the next NBN stage. That NBN
  stage starts when the vector arrives.
* An NBN stage hands beats to the next IBI stage.

`NPE[l]` sets the PE count of layer l. Inside each NBN/IBI pair, the NBN beat
width must equal the IBI inputs per beat.

The y[n] and FIR FIFOs must hold every sample still inside the network. Each
stage holds at most two samples, so the depth defaults to 2·NL + 2.

The latency formula below holds when no stage waits for another. That means
the PE counts give every stage the same rate, and no IBI stage receives beats
more slowly than it uses them. It then extends to deeper networks as a sum
over the NBN/IBI pairs, plus one hand-over cycle for each pair after the
first.

Two three-layer examples:
* NPE = {8, 16, 16, 4}: every stage needs 4 cycles per sample. The network
  takes (2+5) + (2+5) = 14 cycles, and the canceller answers in 18.
* NPE = {8, 16, 4, 2}: the third stage needs 16 cycles per sample. The last
  stage then waits for beats that come every 2 cycles, and the latency grows
  to 30.

### Latency and throughput

Counted from the cycle in which the hidden stage holds a window, the network
result is ready after L1_first + L2 cycles:
* L1_first = ceil(NE_0/N_PE,1) + 1;
* L2 = NE_1·NE_2/N_PE,2 + 1.

That is 2 + 5 = 7 cycles for the default and 2 + 8 = 10 for the peak
configuration. Three more cycles come from registers around the network:
* the input register;
* the hand-over of the window;
* the output register.

So an idle canceller shows y_c[n] 10 cycles after it accepts x[n] (13 cycles
for the peak configuration). When samples arrive back to back, a sample also
waits in the input register until the hidden stage is free. That wait is 3
cycles with the defaults.

The paper's result tables give 5 and 8 cycles. Its own latency formula gives
the 7 and 10 above. The RTL follows the formula.

## Processing elements and memories

* `nn_pe`: one real MAC. It has:
  * a multiplier;
  * an adder;
  * a "reset sum" multiplexer, which adds zero instead of the stored partial
    sum;
  * an "enable" multiplexer, which keeps the stored value;
  * a DEPTH-word partial-sum memory.

  data_out is the new sum when the PE is enabled, and the stored word
  otherwise. DEPTH is 1 in an NBN stage and D in an IBI stage.
* `cpe`: one complex MAC. It uses three real multipliers instead of four:
  * s1 = ar·hr, s2 = ai·hi, s3 = (ar+ai)(hr+hi);
  * re = s1 − s2, im = s3 − s1 − s2.

  The products are kept at full width before scaling. This makes the result
  identical to the four-multiplier form.
* `linear_canceller`: a complex FIR that is not pipelined.
  * NCPE CPEs handle taps c, NCPE + c, … over ceil(L/NCPE) cycles.
  * The next window is accepted in the last compute cycle.
  * The taps are in a register file.
* `wb_mem`: a weight or bias memory. A read returns a whole word
  combinationally. A write stores one value per cycle.

## Number format

Every weight, bias, activation and partial sum is a signed Q-bit
two's-complement number with FRAC fractional bits. The defaults are Q = 16 and
FRAC = 11, which gives a range of ±16.

The arithmetic rules:
* A product is formed at full width, shifted right by FRAC (truncation), and
  saturated.
* Every PE accumulation saturates.
* The adder tree of an output interface adds at full width and saturates once,
  after the bias.

Because partial sums saturate, the result can depend on which products share a
PE. The reference model in the testbenches therefore follows the same PE
assignment.

The peak configuration uses Q = 18 and FRAC = 12. Its hidden activations are
larger, so it gets one more integer bit.

The network output is denormalized by 2^shift. `shift` is a signed 6-bit
exponent: positive shifts left, negative shifts right arithmetically, and the
result is saturated. Training normally also removes a mean from the outputs.
That constant offset should be folded into the output-layer bias.

## Interfaces

Every block boundary and the top use the same handshake:
* A word moves when `valid && !stall`.
* `stall` never depends on `valid`.
* A producer holds its data while it is stalled.

Top-level ports of `nn_canceller`:

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `in_valid`, `in_stall` | in / out | 1 | sample handshake |
| `x_re`, `x_im` | in | Q | transmitted sample x[n] |
| `y_re`, `y_im` | in | Q | received sample y[n] |
| `out_valid`, `out_stall` | out / in | 1 | result handshake |
| `yhat_re`, `yhat_im` | out | Q | estimated self-interference |
| `yc_re`, `yc_im` | out | Q | cancelled sample y[n] − y_hat[n] |
| `cfg` | in | `cfg_wr_t` | one parameter write per cycle |

`cfg` (`nnsic_pkg::cfg_wr_t`) is {we, target, layer, row, col, re, im}. `target`
selects what is written:

| target | layer | row | col | data |
|---|---|---|---|---|
| `CFG_W` | 0 … NL | neuron | input of that layer | `re` |
| `CFG_B` | 0 … NL | neuron | – | `re` |
| `CFG_H` | – | – | tap l | `re`, `im` |
| `CFG_SHIFT` | – | – | – | `re[5:0]`, signed |

Layer 0 is the first hidden layer and layer NL is the output layer. In the
output layer, row 0 is the real part and row 1 the imaginary part.

Network input 2l is Re x[n−l] and input 2l+1 is Im x[n−l].

Write the parameters while no samples are in flight. Writes are not
synchronised with the pipeline. After reset the tap delay line holds zeros, so
the first L−1 windows treat earlier samples as zero.

## Where this design goes beyond or departs from the paper

The paper gives these parts:
* the split into a linear FIR and a feed-forward network, whose layers alternate between the two stage types;
* the NBN/IBI schedules, PE structure and memory widths;
* the three-multiplier CPE;
* the latency and throughput formulas;
* power-of-two denormalization;
* both parameter sets.

This design made its own choices for the rest:
* **Handshake and buffering.** The paper names valid and stall signals but
  gives no timing. This design chose:
  * the rule that stall never depends on valid;
  * the small FIFOs that line up y[n] and the FIR result with the slower
    network;
  * the three-way join in `sic_combiner`.
* **Gathering the input window.** The paper assumes the 2L inputs are simply
  available in parallel. Here a tap delay line provides them.
* **Number format.** The paper gives only the width Q and says that overflow
  saturates. The FRAC split and the place where each sum saturates are this
  design's choices.
* **Memories.** The read timing, the one-value-per-cycle write port and the
  `cfg` encoding are this design's choices.
* **Latency.** The paper's tables (5 and 8 cycles) disagree with its formula
  (7 and 10). The RTL matches the formula. It adds 3 cycles of I/O registers
  end to end.
* **CPE adders.** The paper counts five real adders per CPE. The
  three-multiplier product needs five, and the accumulation needs two more.
* **Denormalization.** The paper speaks of denormalizing with a mean and a
  variance, but restricts the hardware to a power-of-two scale. Only the scale
  is built here; the mean goes into the bias.
* **Input normalization.** Training scales the transmitted samples to unit
  variance. The hardware has no block for that, and the paper's canceller
  diagram shows only the output denormalization. The input scale has to be
  folded into the first-layer weights.
* **Depth.** The paper allows deeper networks that alternate NBN and IBI
  stages. The top takes any odd
  number of hidden layers (see "Deeper networks"). Even depths would end in
  an NBN stage. That case would need a gather stage the paper does not
  describe, so it is left out.
* **Not built:**
  * the polynomial canceller, which the paper only uses for comparison;
  * the analog and RF front end;
  * the offline training.

## Size and cost

At the defaults, a generic synthesis gives:
* about 870 logic cells;
* about 840 flip-flop bits;
* 1248 bits of weight, bias and partial-sum memory.

Model capacity at the defaults:
* 32 + 16 weights, 8 + 2 biases and 2 taps. This is exactly the
  equi-performance network.

The peak network has 272 + 68 weights at 18 bits, so it needs the peak
parameters:
* `L=4, NH=34, Q=18, FRAC=12, NPE='{40, 10}`;
* this gives 7 words × 40 lanes and 7 words × 10 lanes of weight memory.

## Verification

Each block has a self-checking testbench in `tb/`. It compares every output
with an independent bit-exact model (`tb_ref_pkg`).

| testbench | what it checks |
|---|---|
| `tb_nn_pe` | PE enable and reset-sum behaviour, saturation, multi-word memory |
| `tb_wb_mem` | every lane written once per cycle and read back |
| `tb_cpe` | three-multiplier MAC against the four-multiplier product |
| `tb_nbn_stage` | default and peak hidden layers, plus a case with fewer PEs than inputs; values, first-beat latency, rate, stalls |
| `tb_ibi_stage` | default and peak output layers, plus a case with several partial sums per PE |
| `tb_linear_canceller` | L=2 and L=4 with one CPE, L=5 with two CPEs; latency ceil(L/NCPE) |
| `tb_tap_delay_line` | window order under random gaps and stalls |
| `tb_sic_combiner` | denormalization both ways, saturation, three-way join |
| `tb_nn_canceller` | default top |
| `tb_nn_canceller_peak` | peak configuration: period 7, latency 13 |
| `tb_nn_canceller_deep` | two three-hidden-layer cancellers: one without stalls (period 4, latency 18); one whose slow third stage stalls its neighbours (period 16, latency 30) |

`tb_nn_canceller` runs the default top with no parameter overrides. It has
three phases:
1. back-to-back samples, checking a period of 4 and a latency of 10;
2. random input gaps and output stalls;
3. a full parameter reload, then more traffic.

It counts output stalls, input stalls, bubbles, ReLU clipping, saturation,
left and right shifts, and reconfigurations. It fails if any of them never
happened.

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

To run one with Verilator 5:

```
verilator --binary --timing -Irtl -Itb --top-module tb_nn_canceller \
  rtl/nnsic_pkg.sv tb/tb_ref_pkg.sv $(ls rtl/*.sv | grep -v nnsic_pkg) \
  tb/canceller_check.sv tb/tb_nn_canceller.sv
./obj_dir/Vtb_nn_canceller
```

Other testbenches need their helper file:
* the NBN stage tests need `tb/nbn_stage_check.sv`;
* the IBI stage tests need `tb/ibi_stage_check.sv`;
* the FIR tests need `tb/linear_check.sv`.

The stimulus is random and is not the measured over-the-air data set behind
the paper's cancellation figures. The tests show that the RTL computes the
specified fixed-point network exactly. They say nothing about how many dB it
cancels.

## Files

* `rtl/nnsic_pkg.sv` — shared types: activation select, cfg record, ceiling
  division.
* `rtl/fxp_funcs.svh` — saturating fixed-point helpers, included in modules.
* `rtl/nn_pe.sv`, `rtl/wb_mem.sv` — PE and weight/bias memory.
* `rtl/nbn_stage.sv`, `rtl/ibi_stage.sv` — the two macro-pipeline stages.
* `rtl/cpe.sv`, `rtl/linear_canceller.sv` — the complex FIR.
* `rtl/tap_delay_line.sv`, `rtl/sync_fifo.sv`, `rtl/sic_combiner.sv` — input
  window, alignment buffers, denormalization and output adders.
* `rtl/nn_canceller.sv` — the top.
* `tb/` — testbenches, their shared checkers, and the reference model.
