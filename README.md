# LSDNN: a DNN-refined least-squares channel estimator for 802.11p preambles

An OFDM receiver has to know the channel gain on every sub-carrier before it can
equalise the data. In IEEE 802.11p, and in other preamble-based OFDM systems, each frame
starts with a known long training symbol (LTS). Dividing the received LTS by the known one
gives the least-squares (LS) estimate. That is cheap, but at low SNR it carries all of the
noise. LMMSE estimation does better, but it needs channel statistics and a matrix inverse.

The estimator here keeps the LS division and follows it with a small fully connected
neural network (the "LSDNN"). The network has been trained offline to map noisy LS
estimates to the true channel. The LS estimate is normalised before the network and
de-normalised after it. The chain, the arithmetic blocks, the neuron structure and the
layer schedule follow the paper *Deep Neural Network Augmented Wireless Channel
Estimation for Preamble-based OFDM PHY on Zynq System on Chip* (S. A. ul haq et al.). The
SystemVerilog is an independent implementation of that architecture. Where the paper
gives no detail, the choices are this implementation's own. They are listed in
[Departures and open points](#departures-and-open-points).

One estimate is made per frame. At the default size the estimator takes the 52 active
sub-carriers of one received LTS and returns 52 refined complex gains. The first output
sample appears 213 clock cycles after the last input sample.

## The chain

```
 received LTS ──► s2p_extract ──┐                                    (52 complex in)
 (52 complex, stream)           ├─► ls_estimator ─► pre_processor ─► dnn ─► post_processor ─► p2s_combine ──► estimate
 lts_ref_rom ──► s2p_extract ───┘     y / x          (h-m)/v      104-52-104   z*v+m                     (52 complex, stream)
                     104 real       104 real         104 real      104 real    104 real
```

| stage | module | what it does | cycles |
|---|---|---|---|
| serial to parallel, re/im split | `s2p_extract` | collects 52 complex beats into a 104-entry real vector | 52 beats |
| reference LTS | `lts_ref_rom` | replays the 52 BPSK values of the 802.11a/p LTS | 52 beats, overlapped |
| LS estimation | `ls_estimator` (52 × `ls_lane`) | complex division y/x on every sub-carrier | 24 |
| normalisation | `pre_processor` | (h − m)/v per real entry, m and v stored per model | 24 |
| network | `dnn` (`dnn_layer`, `dnn_pe`, `dnn_relu`) | 104 → 52 (ReLU) → 104 fully connected | 159 |
| de-normalisation | `post_processor` | z·v + m per real entry | 1 |
| combine, parallel to serial | `p2s_combine` | 52 complex beats out | 52 beats |
| float boundary | `float_to_fixed`, `fixed_to_float` | single-precision float ↔ FP(24,8) at the ports | 0 (combinational) |

The real vector is always laid out the same way. Entries 0..51 hold the real parts of
sub-carriers −26..−1, 1..26, in ascending order. Entries 52..103 hold the imaginary parts
in the same order. The network therefore sees the complex LS estimate as 104 real
numbers, which is the "complex to real" step of the algorithm.

## Number format

Every datapath word is signed fixed point FP(24,8). That is 24 bits, 8 integer bits
including the sign, and 16 fractional bits, so the range is −128 … +127.99998. The paper
found FP(24,8) to be the shortest word that keeps the estimator's accuracy. The constants
`W`, `I` and `F` in `lsdnn_pkg` set it.

The package helpers define the arithmetic:

* `fx_mul` forms the full 48-bit product and shifts it right by 16. The arithmetic shift
  rounds towards minus infinity. The result saturates to 24 bits.
* `fx_add` and `fx_sub` saturate.
* Division (`fxp_div`) truncates the exact quotient towards zero and saturates. A zero
  divisor gives ±max, and 0/0 gives 0.

A bit-exact model therefore has to use the same rules: floor for products, truncation for
quotients, and saturation after every operation, including every accumulation step in a
neuron. The testbenches contain such a model (`tb/tb_ref_pkg.sv`).

## LS estimation

Each `ls_lane` computes, in one cycle and at full 49-bit precision,

```
num_r = x_r·y_r + x_i·y_i      num_i = x_r·y_i − x_i·y_r      den = x_r² + x_i²
```

Here x is the reference and y the received value. Two `fxp_div` instances then divide
`num_r` and `num_i` by the shared `den`. Both numerators and the denominator carry 32
fractional bits, so the quotient is formed as (|num| << 16) / |den|. That gives a result
with 16 fractional bits directly.

The divider is a restoring divider. It produces one quotient bit per cycle, 23 bits,
most significant first. Before the first step it checks for overflow against the 24-bit
range. The 52 lanes run in parallel, and the stage takes 24 cycles.

For the 802.11p LTS, x is ±1, so the division only copies or negates y. The general
divider still computes that exactly, and it also works for any other reference sequence.

An 802.11p frame carries two identical LTS, and the LS formula averages them:
H = (Y₁ + … + Y_Kp) / (Kp·X). The parameter `KP` on the top builds this. With `KP = 2`,
the receive buffer takes two 52-beat symbols, each ending with `s_last`, and adds them
sub-carrier by sub-carrier with saturation. The lanes then divide by 2·x rather than x,
so no extra division or storage is needed and the result stays exact. The default is
`KP = 1`, one LTS per estimate, which matches the hardware description of the
estimator. Latency from the last input beat is the same for both settings.

## Normalisation and de-normalisation

The network was trained on normalised data. Each of the 104 inputs therefore has its own
mean m and standard deviation v, computed from the training set. The estimator does not
measure them at run time.

`pre_processor` gives every entry a subtractor and an `fxp_div`, so each entry costs
24 cycles. `post_processor` gives every entry a multiplier and an adder, and is
registered once.

The output statistics are stored separately from the input statistics. They describe the
training targets, not the inputs. Both sets exist in every model slot.

## The network engine

This is the part with the most structure.

### The processing element

`dnn_pe` is one neuron, computed serially.

* A counter runs from 0 to NPREV while `pe_en` is high. NPREV is the number of neurons in
  the previous layer.
* At count i < NPREV, a multiplexer picks input `x[i]` and the counter also addresses the
  weight memory. The product `x[i]·w[i]` is added into the accumulator register.
* At count NPREV, the bias is added to the accumulator and the sum is loaded into the
  output register. `y_valid` pulses for one cycle. Otherwise the output register keeps
  its value.
* While `pe_en` is low, a multiplexer holds the accumulator at zero.

So a neuron needs one multiplier, two adders and NPREV + 1 cycles. Its weight memory holds
NPREV words per model slot, and its bias memory one word per slot.

### The layer schedule

`dnn_layer` instantiates one PE per neuron. All PEs share the counter value and the
selected input. In cycle i every PE of the layer multiplies the same value, the output of
neuron i of the previous layer, by its own weight:

```
cycle 0:      O_k  = w_1k · PE_1            (k = 1..K, all PEs in parallel)
cycle 1:      O_k += w_2k · PE_2
...
cycle N-1:    O_k += w_Nk · PE_N
cycle N:      y_k  = O_k + b_k   → ReLU (hidden layers only)
```

The PE output registers are the layer's memory. They are fully partitioned, so the next
layer can select any of them in any cycle. ReLU (`dnn_relu`) sits after each hidden PE. It
is a comparison with zero and a multiplexer. The output layer has no activation.

### Layers in sequence

`dnn` chains NHL hidden layers and one output layer. Each layer starts on the `done`
pulse of the one before it, which costs one cycle per hand-over. The latency is therefore

```
NIN + 1 + NHL·(NHID + 2)   =  104 + 1 + 1·(52 + 2)  =  159 cycles   (LSDNN1, the default)
                           =  104 + 1 + 2·(104 + 2) =  317 cycles   (LSDNN2: NHL = 2, NHID = 104)
```

The default network is the paper's LSDNN1: one hidden layer of K_on = 52 neurons. The
widest layer is the 104-neuron output layer, so 104 PEs work in parallel there. LSDNN2,
with two hidden layers of 104, is a parameter change, and `tb_dnn` runs both networks.

The paper also compares designs with fewer physical PEs, where 2 or all neurons share one
multiplier. Those trade-offs are not built. This implementation is the fully parallel
design.

## Models and the parameter port

Several trained models can be held at once. There are `NMODELS` slots, and the default is
4. Each slot has its own weights, biases, input statistics and output statistics. At the
start of a frame the top samples `model_sel`, and that slot is used for the whole frame.
Switching to another channel condition between frames therefore costs nothing, as long as
its model has been loaded. `model_sel` values of `NMODELS` or more fall back to slot 0.

All parameters are written through one port, `prm` (type `prm_wr_t`), one word per cycle
while `prm.en` is high:

| `prm.kind` | `layer` | `pe` | `idx` | target |
|---|---|---|---|---|
| `PRM_WEIGHT` | layer (0 = first hidden, NHL = output) | neuron | input index | weight `w[idx]` of that neuron |
| `PRM_BIAS` | layer | neuron | – | bias of that neuron |
| `PRM_IN_MEAN`, `PRM_IN_STD` | – | – | 0..103 | normalisation statistics of DNN input `idx` |
| `PRM_OUT_MEAN`, `PRM_OUT_STD` | – | – | 0..103 | de-normalisation statistics of DNN output `idx` |

`prm.model` selects the slot in every case. A full LSDNN1 model takes 10 816 weights,
156 biases and 416 statistics, which is 11 388 writes.

The parameter memories are not reset. Load a slot before using it. Writes may happen while
a frame is running, but a write into the slot in use changes that frame's result.

## Control and timing of the top

`lsdnn_top` holds a small controller. Its states are INIT, LOAD, LS, PRE, DNN, POST and
OUT.

* After reset, the controller starts the reference ROM.
* In LOAD it waits until both vectors are full: the received LTS and the reference.
* It then starts LS and releases both input buffers in the same cycle. It also restarts
  the reference replay. The next LTS can therefore stream in while the current one is
  being processed.
* Each following stage starts on the previous stage's `done` pulse.
* In OUT the result is handed to `p2s_combine`, which sends it while the controller
  returns to LOAD.
* If the output stream is still busy with the previous estimate, the finished frame
  waits in OUT. `out_stall` counts those cycles.

Cycle budget from the last accepted input beat to the first valid output beat, with no
stalls:

```
1 (start LS) + 24 (LS) + 1 + 24 (normalise) + 1 + 159 (DNN) + 1 (de-normalise) + 1 (to OUT) + 1 (load output) = 213
```

After that come 52 output beats. One isolated frame therefore takes 52 + 213 + 51 =
316 cycles from its first input beat to its last output beat. Back to back, the next
LTS streams in during processing, so a new estimate can start about every 213 cycles
when the output is never stalled. The float conversion at the ports is combinational
and adds no cycles. Input and output are valid/ready streams with the
AXI-stream transfer rule: a beat moves when valid and ready are both high. A beat that is
offered must stay unchanged until it is taken, and assertions check this rule on both
streams.

### Top-level ports

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `s_valid`, `s_ready`, `s_data`, `s_last` | in/out/in/in | 1/1/64/1 | received LTS: `s_data = {re, im}`, each an IEEE 754 single-precision float, sub-carriers −26..26 without DC, `s_last` on the 52nd |
| `m_valid`, `m_ready`, `m_data`, `m_last` | out/in/out/out | 1/1/64/1 | channel estimate, same order and format |
| `prm` | in | 46 | parameter write port (above) |
| `model_sel` | in | 3 | model slot for the next frame |
| `busy` | out | 1 | a frame is being processed or sent |
| `frame_done` | out | 1 | one-cycle pulse when a result is handed to the output |
| `len_err` | out | 1 | the last received LTS had `s_last` on the wrong beat |
| `out_stall` | out | 32 | cycles finished frames have waited for the output stream |

## Departures and open points

* **Input and output format.** The paper's FPGA IP exchanges 64-bit complex words, two
  single-precision floats, and converts them at its boundary. The paper notes that this
  conversion is overhead but does not describe it. Here `float_to_fixed` and
  `fixed_to_float` do the conversion, combinationally, at the top-level ports. On input
  the magnitude is truncated towards zero. Out-of-range values and infinities saturate
  with their sign, and zeros, subnormals and NaN become 0. The output conversion is exact,
  because an FP(24,8) value has at most 24 significant bits. A system that feeds
  fixed-point data, as the paper suggests, can drop the two converters and connect
  `cplx_t` streams directly.
* **Two LTS symbols.** The LS formula averages all preamble symbols of the frame
  (802.11p has two LTS). The hardware description feeds one LTS vector to the LS stage.
  `KP = 1` (the default) follows the hardware description, and `KP = 2` gives the
  formula's average (see [LS estimation](#ls-estimation)). The sum of two symbols
  saturates at the FP(24,8) range before it is halved, so received values above 64 in
  magnitude are clipped. That cannot happen with the single-symbol default.
* **Sign in the LS equation.** The paper's printed equation adds the two cross products in
  the imaginary numerator, while its block diagram subtracts them. The subtraction is the
  correct complex division and is what is built.
* **Hidden layer width.** The paper's parameter table gives LSDNN1 one hidden layer of
  K_on = 52 neurons. Its block diagram labels hidden PEs up to "2K", and its resource table
  speaks of 104 parallel PEs. The 52-neuron hidden layer is built. 104 is the output layer
  width.
* **Counter.** The neuron diagram names a "mod 2K" counter and an "= 2K" comparator. The
  counter here counts 0..NPREV, so the comparator can fire.
* **Statistics.** The pre- and post-processing diagrams use the same symbols for mean and
  deviation. Separate input and output statistics are stored. They can be loaded with the
  same values.
* **Parameter loading.** On the FPGA, model parameters sit in BRAM initialised by
  (partial) reconfiguration, or they come from DDR through DMA. Here they are written
  through `prm`. The DDR-backed variant is not built.
* **Number rules.** Truncation, saturation, the divider algorithm, reset behaviour, the
  stream handshake, the vector layout and the controller are this implementation's
  choices. The paper does not specify them.
* **Reference sequence.** The LTS signs are those of the IEEE 802.11a/p standard, stored
  as constants in `lts_ref_rom`.
* **Not included.** The DMA engines, the AXI interconnect and AXI-Lite registers, the ARM
  processor system, DDR, and the OFDM receiver around the estimator (FFT, equaliser) are
  not included. The LS-only and LMMSE estimators, which the paper uses as baselines, are
  also not included. Neither are the lower-cost engine variants it compares, in which two
  neurons, or all of them, share one multiply-accumulate unit. The engine here has one
  unit per neuron.

## Verification

Each block has a self-checking testbench in `tb/`. The testbenches compare the outputs
against a reference written separately in `tb/tb_ref_pkg.sv`: saturating fixed-point
arithmetic, exact division on 128-bit integers, and a dense-layer function.

| testbench | checks |
|---|---|
| `tb_s2p_extract` | vector layout, back-pressure while full, length-error flag, two-symbol sums |
| `tb_lts_ref_rom` | all 52 LTS signs, `m_last`, replay under random stalls |
| `tb_ls_estimator` | y/x for BPSK and general references, divide-by-zero saturation, 24-cycle latency, y/(2x) with `KP = 2` |
| `tb_pre_processor` | (h−m)/v for two model slots, v = 0, latency |
| `tb_post_processor` | z·v+m with saturation for two slots, one-cycle latency |
| `tb_dnn_pe` | dot product plus bias for three slots, accumulator saturation, 105-cycle pass |
| `tb_dnn_relu` | edge and random values |
| `tb_dnn_layer` | a 104→52 ReLU layer, writes to other layers ignored, clipping happened, latency |
| `tb_dnn` | LSDNN1 and LSDNN2 side by side against a reference forward pass, 159 and 317 cycles |
| `tb_p2s_combine` | pairing, order, `m_last`, ignored load while busy, stalled receiver |
| `tb_float_to_fixed` | ±0, ±1, range edges, ±inf, NaN, subnormal, 4000 random floats over a wide exponent range |
| `tb_fixed_to_float` | zero, range edges, every power of two, 4000 random values, exact value check |
| `tb_lsdnn_top` | whole estimator at default size: two random models, 8 frames, float words in and out, every output sample bit-exact |
| `tb_lsdnn_top_kp2` | the same with `KP = 2`: two noisy LTS per frame, averaged |

`tb_lsdnn_top` runs the whole estimator at its default size. It also requires that each
of the following happens at least once:

* a model switch
* ReLU clipping
* input gaps
* output stalls
* a finished frame waiting for the output
* an LTS received during processing
* a length error

The top test uses random weights, not a trained model, so it checks the arithmetic, not
the estimation quality.

To run one testbench with Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/lsdnn_pkg.sv tb/tb_ref_pkg.sv tb/tb_lsdnn_top.sv --top-module tb_lsdnn_top -o sim
./obj_dir/sim
```

Every testbench prints a final line `TB_RESULT checks=N failures=M`. The full-size top
test takes about 15 seconds to build and run.

## Changing the design

* **Network shape.** Set `NHL` and `NHID` on `lsdnn_top` (or `dnn`). For example
  `NHL = 2, NHID = 104` gives LSDNN2. The write port's `layer` field is 2 bits wide, so
  up to 3 hidden layers are possible.
* **Preamble averaging.** Set `KP` (the number of LTS per estimate). See
  [LS estimation](#ls-estimation).
* **Model slots.** Set `NMODELS`. It can be up to 8 with the 3-bit `model_sel`. Memory
  grows linearly with it. At the default of 4 the parameter memories hold about 1.1 Mbit.
* **Word length.** Change `W` and `I` in `lsdnn_pkg`. Every module follows them. The
  testbench reference model hard-codes 24/16 bits and would need the same change.
  `fixed_to_float` is exact only for `W` ≤ 24. Beyond that the float fraction field
  cannot hold every bit, and the converter drops the lowest ones.
* **Sub-carrier count.** `NSC` sizes the buffers, the LS lanes and the vectors. The
  reference ROM holds only the 52-carrier 802.11p LTS, so a different count needs a
  different ROM or an external reference.
