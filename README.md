# An integer-only streaming accelerator for quantized control policies

A reinforcement-learning controller for a robot or a plant evaluates a small
neural network, the *policy*, once per control step. It maps a sensor state
to an action vector in [-1, 1]. If the policy is trained with quantization in
the loop, its weights and activations can be as narrow as 2 or 3 bits. Then
the whole network runs on plain integer adders and comparators, with no
floating point, and it fits a small FPGA with a latency of a few tens of
clock cycles.

This RTL implements that inference engine: a streaming dataflow of three
fully-connected layers. The layers are joined by FIFOs, and weights and
thresholds are kept on chip. It follows the deployment flow of *Learning
Quantized Continuous Controllers for Integer Hardware*, which trains SAC
policies with quantization-aware training and builds them with the FINN
dataflow compiler. The code here is an independent register-transfer
description of that architecture. It is not FINN's generated code. All
parameters default to the paper's Hopper policy: 11 observations, two hidden
layers of 16 units, 2-bit weights and activations, a 6-bit input, and 8-bit
outputs padded to 32.

## The network being computed

```
 state codes x0 (IN_DIM x B_IN, signed)
   -> layer 0  acc = W0 x0   -> threshold requant (ReLU)  -> h0 (H x B_CORE, unsigned)
   -> layer 1  acc = W1 h0   -> threshold requant (ReLU)  -> h1 (H x B_CORE, unsigned)
   -> layer 2  acc = W2 h1   -> threshold requant         -> y  (OUT_DIM x B_OUT, signed)
   -> tanh table                                           -> a  (OUT_DIM x Q1.15)
```

All weights are signed `B_CORE`-bit integers. The floating-point step that
turns a raw sensor value into the `B_IN`-bit input code (`clip(round(x/s·q))`)
is not part of this hardware. Its form depends on the sensors, and integer
sensors can often do it with a shift or a small table. The accelerator
therefore receives integer codes. `OUT_DIM` is the number of actions rounded
up to a multiple of 32. Only the first outputs carry real actions; the rest
come from weight rows that the host may fill with zeros.

## Requantization by thresholds

This is the part that is easiest to misread. During training, every layer
output goes through ReLU, a multiplication by a real-valued scale, a bias,
rounding, and clipping to `[0, 2^b-1]`. For a fixed channel, all of that is a
monotone staircase from the integer accumulator to a b-bit code. A staircase
with `2^b-1` steps is fully described by the accumulator values where it
steps up. The hardware therefore stores those `2^b-1` thresholds per output
channel and computes

```
q = #{ i : acc >= T_i }            (thresholds in ascending order)
```

which needs only comparators and a population count. Consequences:

* **ReLU, bias and scale cost nothing.** They are folded into the threshold
  values by whoever exports the policy. A hidden layer's thresholds all lie
  above the ReLU zero point, so a negative sum gives code 0. A sum above the
  last threshold gives the largest code, so clipping is free too.
* **The output layer is signed.** It uses 255 thresholds for 8 bits, and the
  count is shifted by -128 (the top bit is inverted) to give a
  two's-complement code in [-128, 127].
* **Cost grows as 2^b.** A 2-bit hidden layer needs 3 comparators per
  channel; the 8-bit output layer needs 255. This is why the narrow core
  precision matters more than the width of the output.
* **Accumulators never overflow.** The accumulator width is the smallest
  signed width that holds `MW · max|x| · max|w|`
  (`qpolicy_pkg::acc_width`). Thresholds are one bit wider, so a threshold
  can sit beyond every reachable sum, which is how a code that should never
  occur is expressed. Equal neighbouring thresholds are allowed and skip a
  code.

The threshold values themselves come from the trained model. For output
channel r with accumulator scale `s_acc[r]`, bias `b[r]` and output scale
`s_out`, threshold i is the smallest integer `acc` with
`round((s_acc[r]·acc + b[r]) / s_out) >= i + 1` (plus `qmin` for signed
outputs). Computing them is part of exporting a policy and is not in this
RTL.

## Folding: PE and SIMD

Each layer (`mvau`) multiplies an `MH x MW` matrix by a vector on a grid of
`PE x SIMD` multipliers:

* The input arrives as `SF = MW/SIMD` beats of `SIMD` codes. Beat `sf` holds
  elements `sf·SIMD … sf·SIMD+SIMD-1`.
* The output leaves as `NF = MH/PE` beats of `PE` codes. Beat `nf` holds
  elements `nf·PE … nf·PE+PE-1`.
* One vector takes `SF·NF` cycles. In every cycle each PE adds a SIMD-wide
  dot product to its accumulator. In the first output fold the input beats
  come from the stream and are copied into an input buffer of `SF` beats.
  Later folds replay them from that buffer.

`SIMD` must divide `MW`, and `PE` must divide `MH`. Inside the accelerator,
each layer's `SIMD` equals the previous layer's `PE`, so beats pass between
layers without width conversion. The top therefore exposes only `L1_SIMD`,
`L1_PE`, `L2_PE` and `L3_PE`.

Weights sit in `weight_mem` as `SF·NF` tiles of `PE x SIMD` weights. Weight
(row r, column c) is stored in tile `(r/PE)·SF + c/SIMD`, lane
`[r%PE][c%SIMD]`. Thresholds sit in `thresholding` as `NF` words, one per
output fold, each holding `PE x (2^B_OUT-1)` thresholds. Both memories have
one read port and are read combinationally in the cycle that uses them.

## Pipeline and timing

Each layer has three stages: a MAC cycle per input beat, a register holding
the finished sums of a fold, and a register holding the requantized codes.
Every stream uses valid/ready: a beat moves when both are high, and a
producer holds an offered beat unchanged until it is taken (there are
assertions for this). A `stream_fifo` of `FIFO_DEPTH` (default 2) beats
joins every pair of stages. The tanh table adds one register.

* **Latency, idle pipeline, fully parallel layers (the default):** 3 cycles
  per layer including its FIFO, plus 1 for the table, which is 10 cycles from
  accepting a state to presenting its action. At a 100 MHz clock that is
  100 ns. The paper reports 21 cycles (210 ns) for its FINN build of the same
  policy.
* **Throughput:** one state per `max_l(SF_l·NF_l)` cycles once the pipeline
  is full, which is one per cycle at the default.
* **Folded layers:** a layer's first output beat appears `SF+1` cycles after
  its first input beat, and further folds follow every `SF` cycles. For
  example, with 12 inputs, width 8, 8 outputs and folding 4/2, 2/4, 4/2, the
  latency is 25 cycles and a new state is accepted every 12 cycles.
* **Back-pressure:** when the action consumer holds `m_ready` low, the FIFOs
  fill, each layer stalls only when its finished sums have nowhere to go, and
  finally `s_ready` drops.

## Programming the accelerator

Weights, thresholds and the tanh table are written through one
configuration port, `cfg` (a `qpolicy_pkg::cfg_t`). Each write stores one
value:

| `target`     | `layer` | `a`               | `b`     | `c`                     | `data`            |
|--------------|---------|-------------------|---------|-------------------------|-------------------|
| `CFG_WEIGHT` | 0,1,2   | tile `nf·SF+sf`   | PE lane | SIMD lane               | weight            |
| `CFG_THRESH` | 0,1,2   | output fold `nf`  | PE lane | threshold index `i`     | threshold `T_i`   |
| `CFG_TANH`   | —       | —                 | —       | `code + 2^(B_OUT-1)`    | Q1.15 action      |

Load the accelerator while no state is in flight. The table entry for code
k should be `round(tanh(k · s_out / 128) · 32767)`, where `s_out` is the
output layer's learned scale. A table is used because that scale is only
known after training. The paper says weights and thresholds are kept on
chip; loading them at run time is this design's choice. A fixed-policy
build could instead tie the write ports off and initialise the arrays.

## Files

| file | contents |
|---|---|
| `rtl/qpolicy_pkg.sv` | configuration bus type, accumulator-width function |
| `rtl/stream_fifo.sv` | valid/ready FIFO between layers |
| `rtl/weight_mem.sv` | folded weight store of one layer |
| `rtl/thresholding.sv` | threshold requantizer (ReLU, scale, clip) |
| `rtl/mvau.sv` | one fully-connected layer: input buffer, MAC array, requantization |
| `rtl/tanh_lut.sv` | 8-bit code to Q1.15 action table |
| `rtl/policy_accel.sv` | top: three layers, three FIFOs, the table |
| `tb/tb_*.sv` | one self-checking testbench per block |
| `tb/policy_harness.sv` | stimulus and integer reference model of the whole network |
| `tb/tb_policy_full.sv` | the top at its default parameters, 40 states back to back |
| `tb/tb_policy_accel.sv` | the top folded, with and without stalls |
| `tb/tb_workloads.sv` | the five evaluated policies, each with its own sizes |

## Building other policies

The paper selects one configuration per task. They differ in size only, and
each is a separate build of `policy_accel`. Observation and action counts
below are those of the MuJoCo v4 tasks; actions are padded to 32.

| policy      | `IN_DIM` | `H` | `B_CORE` | `B_IN` | folding used in `tb_workloads` | interval |
|-------------|---------:|----:|---------:|-------:|--------------------------------|---------:|
| Hopper      | 11  | 16  | 2 | 6 | 11/16, 16, 32 (default) | 1  |
| Humanoid    | 376 | 16  | 3 | 4 | 8/16, 16, 32            | 47 |
| Ant         | 27  | 64  | 2 | 3 | 27/16, 16, 16           | 16 |
| Walker2d    | 17  | 128 | 2 | 3 | 17/16, 16, 8            | 64 |
| HalfCheetah | 17  | 256 | 3 | 8 | 17/32, 32, 8            | 64 |

The paper does not give its folding. These choices are only examples of
legal ones; any folding that meets the divisibility rules works.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. A
watchdog ends it with a failure if it hangs. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/qpolicy_pkg.sv \
          tb/tb_policy_full.sv --top-module tb_policy_full -o sim
./obj_dir/sim
```

Swap in any other `tb_*` name. `tb_workloads` takes about a minute to build
and run; the others take seconds. The testbenches draw random policies and
states. Thresholds are placed from the sums those states actually produce,
so every run sees ReLU zeros and clipping at both ends of the output codes.
The end-to-end tests fail unless each of these happens at least once:
back-pressure at the output and the input, a full FIFO, several states in
flight at once, ReLU zeros, hidden clipping, and output clipping. They also
check latency and initiation interval.

## Where this departs from the paper, and what is assumed

* **Not built:** the floating-point input quantizer (the paper keeps it
  outside the hardware), the training-only parts of SAC (critics and the
  σ branch), and FINN's own infrastructure, such as its AXI-Stream wrappers
  and data-width converters.
* **Included, although the paper's synthesis numbers exclude it:** the tanh
  table. The paper describes it as part of integer deployment.
* **Own choices:** two hidden layers (the usual SAC actor layout); `B_CORE`
  weights in all three layers; fully parallel default folding; FIFO depth 2;
  valid/ready handshakes; synchronous active-low reset; the configuration
  bus and memory layouts; Q1.15 action format.
* **Timing is not FINN's.** The pipeline here is simpler than FINN's, so
  latency and resources differ from the paper's Table 3. The arithmetic
  (integer products, full-width sums and threshold counts) is bit-exact with
  the integer reference model in the testbenches. Whether a given trained
  policy reproduces its training-time outputs depends on its exported
  thresholds, which are outside this RTL.
* **Not verified:** timing closure at 100 MHz and resource use on an
  Artix-7. The threshold comparison of a wide 8-bit output layer is a long
  combinational path, and a real build may need a register inside it.
