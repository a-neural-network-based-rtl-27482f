# ONLAD core: an on-device learning anomaly detector in SystemVerilog

An anomaly detector deployed at the edge usually meets data that drift away from what
it was trained on. The ONLAD core addresses this by learning on the device itself, one
sample at a time, with a small neural network whose training needs neither
back-propagation nor stored history. The network is an autoencoder: it is trained to
reproduce "normal" input vectors, so a vector it reconstructs badly is anomalous, and
the reconstruction error is the anomaly score.

The autoencoder is an extreme learning machine with one hidden layer. Its input
weights `alpha` (n x N) and bias `b` (N) are random and never change; only the output
weights `beta` (N x n) are learned. Learning uses the online sequential form of the
method (OS-ELM), a recursive-least-squares update that keeps an N x N matrix `P` in
place of the old data. A forgetting factor `alpha_i` (0 < alpha_i <= 1) shrinks the
weight of past samples at every step, so the model follows a concept drift instead of
averaging over it.

Here n = `N_IN` (input and output width) and N = `N_HID` (hidden width). The RTL
defaults are n = 512, N = 64.

## What one training step computes

For one input row vector `x` (batch size 1) a training step is

```
h    = x*alpha + b                      (activation G = identity)
P'   = P/alpha_i^2 - (P/alpha_i^2) h^T h (P/alpha_i^2) / (1 + h (P/alpha_i^2) h^T)
beta = beta + P' h^T (x - h*beta)
```

The core evaluates it as a fixed sequence of ten matrix operations, each reading the
previous one's result from a local store:

| step | result | operation | multiply-accumulates |
|------|--------|-----------|----------------------|
| 1 | `h`  | `x*alpha + b` | n*N |
| 2 | `O1` | `P * (1/alpha_i^2)` | N^2 |
| 3 | `O2` | `O1 * h^T` | N^2 |
| 4 | `O3` | `1 + h*O2` (a scalar) | N |
| – | test | stop if `O3 < epsilon` | – |
| 5 | `O4` | `h * O1` | N^2 |
| 6 | `O5` | `O2 * O4` (outer product) | N^2 |
| 7 | `P`  | `O1 - O5 * (1/O3)` | N^2 |
| 8 | `O6` | `P * h^T` | N^2 |
| 9 | `O7` | `h * beta` | n*N |
| 10 | `O8`, `beta` | `O8 = x - O7`, `beta += O6 * O8` | n + n*N |

The test after step 4 is the safety valve of the method. `O3` is the denominator of
the update. If it falls below `epsilon` = 1e-4 (the fixed-point value 419 / 2^22),
the update would be numerically meaningless. The step then stops and leaves `P` and
`beta` as they were. The instruction's `Success` flag is 1 in that case; a completed
update returns 0. So "Success = 1" means "training interrupted", which reads oddly
but is the convention the core keeps.

A prediction is the first half of the same computation plus a loss:

```
h = x*alpha + b,   y = h*beta,   score = (1/n) * sum_c (x[c] - y[c])^2
```

## Number format and arithmetic

Every stored value is signed 32-bit fixed point Q10.22: 10 integer bits including the
sign, and 22 fraction bits. The range is about ±512 with a resolution of 2.4e-7.
`onlad_pkg` holds the shared arithmetic:

- **Products** are formed at full 64-bit width.
- **Dot products** add those full products into an 80-bit accumulator. The sum is
  shifted down by 22 (an arithmetic shift, so it truncates toward minus infinity)
  only once, at the end.
- **Saturation:** every result written back saturates to the Q10.22 range.
- **Division:** the two divisions of a step (by `alpha_i^2` and by `O3`) become
  multiplications by reciprocals. `fx_recip` computes `2^44 / d` as a 48-bit
  Q26.22 value with a restoring divider. It takes 45 cycles and is run twice per step.
  A divisor <= 0 gives the largest reciprocal at once; this happens only when
  `alpha_i <= 0` or when training has already stopped.

These choices (truncation, one rounding per dot product, saturation and reciprocal
division) are this design's own. The reference model in the testbenches applies the
same rules, so simulations compare bit for bit.

## Instruction packets

The host talks to the core only through packets on two AXI4-Stream ports. An input
packet is 64 bits wide:

| bits | field | meaning |
|------|-------|---------|
| 63:61 | mode  | instruction |
| 60:32 | index | 29-bit element index (row-major) |
| 31:0  | value | Q10.22 operand |

| mode | instruction | effect | output packet (32 bits) |
|------|-------------|--------|-------------------------|
| 000 | update alpha | `alpha[index] <= value` | 0 |
| 001 | update beta  | `beta[index] <= value` | 0 |
| 010 | update P     | `P[index] <= value` | 0 |
| 011 | update b     | `b[index] <= value` | 0 |
| 100 | update input | `x[index] <= value` | 0 |
| 101 | update ff    | `alpha_i <= value` | 0 |
| 110 | do training  | one training step on `x` | `{31'b0, Success}` |
| 111 | do prediction | score of `x` | score (Q10.22) |

The matrices are stored row-major: `alpha[r][c]` is at `r*N + c`, `beta[r][c]` at
`r*n + c` and `P[r][c]` at `r*N + c`. An index beyond the end of an array is ignored.

The core cannot draw random numbers, so initialising the model is the host's job. It
writes random `alpha` and `b`, sets `beta` = 0 and writes an initial `P`: the
identity, or the inverse Gram matrix of a first batch, which OS-ELM's initial
training would give. It also sets `alpha_i`, which resets to 1.0. Training then runs
one sample per `do training` packet, and scoring one sample per `do prediction`
packet. Each instruction returns exactly one output packet, so the host can match
results to requests by counting.

The output packet's TLAST copies the TLAST of the input packet that caused it. A
DMA engine that sends a block of packets thus receives its last result with TLAST set.

## Block structure

```
 s_axis (64b) --> packet_parser --(owner, host writes, start/done)--+
                        |                                            |
                        |                    onlad_bus (2-lane request/response mux)
                        |                     |      |        |          |
                        |               param_buffer  input_buffer  train_module  predict_module
                        |              (alpha,beta,P,b)    (x)
                        v
               packet_serializer --> m_axis (32b)
```

- **`packet_parser`** accepts a packet only when no instruction is running and the
  output register is free. Updates therefore flow at one packet per cycle. A
  `do training` or `do prediction` packet holds TREADY low until its result has been
  passed on. If the output side is still stalled when the unit finishes, the result
  waits in the parser's `P_HOLD` state. The parser also selects who drives the buses:
  the host while idle, otherwise the running unit.
- **`onlad_bus`** is a combinational multiplexer of memory requests. Each memory has
  two read lanes and two write lanes. The owner selects which block's request reaches
  each memory, and every block sees the read data.
- **`param_buffer`** holds `alpha` (n*N words), `beta` (N*n), `P` (N^2) and `b`
  (N). **`input_buffer`** holds `x` (n words). Both are built from `onlad_ram`: an
  array with asynchronous reads and synchronous writes, which drops writes out of range
  and reads 0 there.
- **`train_module`** and **`predict_module`** run their steps as loop nests over the
  same two lanes. A small state machine walks outer and inner counters. Each module
  keeps its intermediate vectors and matrices in local arrays: `O1` and `O5` are N x N,
  the rest are vectors.
- **`packet_serializer`** is a one-entry output register. It formats the result by
  instruction kind and holds it stable while TREADY is low.

`onlad_core` is the top and wires all of these together.

## Timing

Work is done on `LANES` = 2 multipliers, so an operation over K elements takes K/2
cycles. With n and N at least 2 and even, and N^2 >= 45:

- **`do training`, completed step:**
  `47 + 3*n*N/2 + 3*N^2 + N/2 + n/2 + 3` cycles from start to done. At n = 512,
  N = 64 this is 61,778 cycles, 0.62 ms at 100 MHz.
- **`do training`, stopped by the epsilon test:** `47 + n*N/2 + N^2 + N/2 + 1` cycles.
- **`do prediction`:** `n*N + n/2 + 2` cycles; 33,026 at the defaults.
- **Updates:** one cycle each.

The constant 47 is mostly the reciprocal of `alpha_i^2`. It is computed before step 1,
because it is needed early. The reciprocal of `O3` runs during steps 5 and 6, which
take N^2 cycles together; hence the condition N^2 >= 45. Outside these counts, the
parser adds one cycle to start an instruction and the serializer one cycle of output
register.

The work per step grows as n*N + N^2, so the cost is dominated by n at small N and by
N^2 at large N. The local stores of the training unit hold 2*N^2 + 4*N + 2*n + 1 words.

## Sizes

n and N are set at elaboration time by `N_IN` and `N_HID`. The parameter memory holds
N^2 + (2n+1)N words: 70,208 at the defaults. A core built for 512 x 64 can also run
any smaller model by zero-padding. Unused rows and columns of `alpha`, `b`, `beta`, `P`
and `x` are written as 0. The padded entries of `h` and of `x - h*beta` then stay 0, so
`beta` and the used block of `P` evolve as in the small model. The score, however, is divided by 512
instead of n, so multiply it by 512/n to get the small model's score. Models wider
than the build (for example, the 784 pixels of an MNIST image) need a larger build.

## Departures from the published design

- **Memories:** the arrays read asynchronously. The original implementation uses
  FPGA block RAMs, which read synchronously. Registering the read data would add one
  cycle of latency per loop and change the cycle counts above by a few cycles per
  operation.
- **Division:** implemented as reciprocal plus multiplication (see above). How the
  original divides is not described.
- **Activation:** only the identity is built. This is the setting of all published
  hardware results. A sigmoid would go into the `h` step of both units.
- **Mode codes:** the codes of the six update instructions are this design's own
  assignment. Only the set of instructions is given.
- **Outputs:** an update instruction returns a zero packet. This gives one output
  per input; whether the original answers updates is not described.
- **TLAST:** the output TLAST copies the input TLAST.
- **Initial `P`:** computed by the host (see above). The core only performs the
  sequential step.
- **Mutual exclusion:** training and prediction never overlap. Each instruction
  finishes before the next packet is accepted.
- **Fixed point:** the format is the published one. Its rounding and overflow
  behaviour are this design's own.

## Testbenches

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<m>` and has a cycle watchdog:

| testbench | what it checks |
|-----------|----------------|
| `tb_train_module` | Three training steps (`alpha_i` = 0.98, 1.0, 0.95) at n = 16, N = 8, against a bit-exact model and a floating-point model, plus a step that must stop at the epsilon test. Also the exact cycle counts. |
| `tb_predict_module` | Scores against bit-exact and floating-point models; the cycle count. |
| `tb_param_buffer`, `tb_input_buffer` | Writes and reads on both lanes; out-of-range accesses. |
| `tb_onlad_bus` | Routing of every request and response for every owner, with random traffic. |
| `tb_packet_parser` | Decoding of every mode and index; TREADY; results held under back-pressure; TLAST. |
| `tb_packet_serializer` | Formatting by kind; data held stable while stalled. |
| `tb_onlad_core` | The whole core at n = 16, N = 8, the size of the online Letter Recognition setting: a sender with random TVALID gaps and a receiver with random TREADY, and every output packet predicted by a bit-exact model of the core. |
| `tb_onlad_core_full` | The same test at the default size n = 512, N = 64, with the top instantiated without parameters. |

The end-to-end scenario is the same in both core testbenches:

1. Load `alpha` ~ U[0, 2/n), `b` ~ U[0, 1), `P` = I and `beta` = 0.
2. Train on noisy samples of a normal pattern A, mixed with predictions.
3. Check that a sample of a different pattern B scores higher than A.
4. Set `alpha_i` = 0.95 and train on B (a concept drift). Check that B's score falls.
5. Make out-of-range writes, then force `Success` = 1 by loading a negative-definite `P`.

It counts every instruction kind, completed and stopped steps, input stalls, output
back-pressure and TLAST, and fails if any of them never happened.

To simulate with Verilator (5.x):

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/onlad_pkg.sv rtl/*.sv tb/tb_onlad_core.sv --top-module tb_onlad_core
./obj_dir/Vtb_onlad_core
```

The same command with another testbench name runs the unit tests. The C++ build of the
core testbenches takes a few minutes, and the full-size simulation a few seconds. To
try other sizes, change `NI`, `NH` and `N_NORMAL` at the top of `tb/tb_onlad_core.sv`.
n and N must be even; the reference model scales with them.
