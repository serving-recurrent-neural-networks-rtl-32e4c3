# Loop-based LSTM serving engine on a spatial (Plasticine-style) fabric

This repository holds a synthesizable SystemVerilog model of an LSTM
inference engine built the way a coarse-grained spatial accelerator runs
recurrent networks. It follows "Serving Recurrent Neural Networks
Efficiently with a Spatial Accelerator" (Zhao, Zhang, Prabhakar, Olukotun).
It maps the loop-based LSTM schedule onto a Plasticine-style array whose
Pattern Compute Units (PCUs) have low-precision SIMD arithmetic.

Each time step, the engine works out, for every hidden element n:

```
i, j, f, o = W_{i,j,f,o}[n] . [x_t, h_{t-1}] + b_{i,j,f,o}[n]
c_t[n]     = sigmoid(f) * c_{t-1}[n] + sigmoid(i) * tanh(j)
h_t[n]     = sigmoid(o) * tanh(c_t[n])
```

All weights stay on chip in the PMUs (Pattern Memory Units). The engine has
no external memory traffic while it serves.

## Block structure

| File | Role |
|---|---|
| `rtl/rnn_pkg.sv` | Number formats, FU opcodes, gate order, saturation helpers |
| `rtl/lp_fu.sv` | One functional unit: 32-bit add, 4x8-bit split multiply, 2x16-bit split add |
| `rtl/folded_reduce.sv` | Pipelined lane reduction tree with a folded accumulator |
| `rtl/pcu.sv` | MapReduce PCU: multiply, two pair-add stages, folded reduce |
| `rtl/pmu.sv` | Banked scratchpad: one 32-bit word per bank per row |
| `rtl/ru_reduce.sv` | Adder tree joining the `ru` PCUs of one gate |
| `rtl/gate_dot.sv` | One gate's MapReduce: `ru` PCUs, each with its own weight PMUs |
| `rtl/nonlin.sv` | Piecewise-linear sigmoid and tanh |
| `rtl/lstm_eltwise.sv` | Bias, activations and the c/h update (5-stage pipeline) |
| `rtl/lstm1_unit.sv` | One LSTM-1 copy: 4 gate_dots, bias and c-state PMUs, element-wise pipe |
| `rtl/vec_buffer.sv` | Double-buffered `[x_t, h_{t-1}]` vector |
| `rtl/loop_controller.sv` | Outer (hidden) and inner (reduction) loop sequencer |
| `rtl/rnn_serving_top.sv` | Top: `hu` LSTM-1 units, vector buffer, controller, load ports |

Default top parameters:

| Parameter | Value | Meaning |
|---|---|---|
| `HU` | 4 | LSTM-1 copies (outer-loop unroll) |
| `RU` | 8 | PCUs per gate (reduction unroll) |
| `LANES` | 16 | SIMD lanes per PCU; each lane holds 4 int8 values, so `rv` = 64 |
| `PMUS` | 3 | 84 kB weight PMUs per MapReduce PCU |
| `PMU_DEPTH` | 1344 | 64-byte rows per PMU (84 kB) |
| `MAX_H` | 2048 | Largest hidden size |
| `MAX_R` | 4096 | Largest `D + H` |

At these defaults the engine has:

- 4 x 4 x 8 = 128 MapReduce PCUs.
- 384 weight PMUs, which is 31.5 MiB of int8 weights.

The `HU`, `RU`, `LANES` and PMU numbers are the unroll factors and fabric
sizes of the reference design.

## Datapath

### Number formats

The datapath uses fixed point. The reference design uses 8- and 16-bit
floating point, whose exact format is not given. Its FUs support both
kinds of arithmetic.

- Weights are int8 in Q1.6 (range about ±2).
- `x` and `h` are int8 in Q0.7.
- A product is an exact 16-bit Q7.13 value.
- Pair sums saturate at 16 bits.
- The reduction and accumulation use wrapping 32-bit arithmetic.
- A gate pre-activation is a 32-bit Q13 value.
- Bias and element-wise values use Q16 in 32 bits. The bias is added after a `<<< 3` and saturates.
- `h_t` is sent back into the vector buffer as int8 Q0.7 (rounded down and saturated).
- `h_t` and `c_t` are also available at full precision inside each unit.

### PCU pipeline

Each lane carries four int8 values packed in a 32-bit word. The PCU has
four registered stages:

1. `MUL4X8_SPLIT`: four 8x8 products. These are written as two words,
   `{p1,p0}` and `{p3,p2}`.
2. `ADD2X16_SPLIT`: `p0+p2` and `p1+p3`, each saturated to 16 bits.
3. `ADD32`: the two 16-bit halves are sign-extended and added.
4. Folded reduction: `log2(LANES)` registered adder levels. Then an
   accumulator adds up all the vectors of one dot product.

The latency from input to result is `4 + log2(LANES)` cycles, which is 8
at 16 lanes. The reference design gives `2 + log2(LANES) + 1` (7). This
design spends one more cycle because the stage-3 32-bit add has its own
register.

The PCU accepts a new vector every cycle with no stalls. Dot products of
`n` vectors each come out one every `n` cycles.
`tb/pcu_tb.sv` checks both the latency and the throughput.

### Activation functions

The reference design does not say how the sigmoid and tanh units work.
This design uses the PLAN piecewise-linear sigmoid, with slopes
1/4, 1/8 and 1/32 and saturation at |x| ≥ 5. It computes
`tanh(x) = 2*sigmoid(2x) - 1`. The worst-case error is about 0.02 for
sigmoid and 0.04 for tanh. `tb/tb_ref_pkg.sv` holds a separate reference
model, and the testbenches compare results to it bit for bit.

### Data layout and loop schedule

The unit `u` computes the hidden elements `n = k*HU + u` for
`k = 0 .. ceil(H/HU)-1`.

The concatenated input `[x_t, h_{t-1}]` has length `R = D + H`. It is cut
into chunks of `4*LANES*RU` bytes (512 at the defaults). There are
`NCH = ceil(R / (4*LANES*RU))` chunks. The last chunk is padded with zero
weights.

Weights are placed so that each PCU reads one PMU row per cycle:

- Row `k*NCH + c` of PCU `r` in gate `g` of unit `u` holds
  `W_g[k*HU+u][(c*RU + r)*64 .. +63]`.
- Rows go to the PCU's PMUs one after another: PMU `row / 1344`, address
  `row % 1344`.

`loop_controller` runs the loops. For each `k` and each chunk it issues
one read of that row in every weight PMU of the engine, and one chunk
read from the vector buffer. Every unit and every gate receives the same
vector chunk.

- Each PCU accumulates over `c`.
- `ru_reduce` adds the `RU` partial sums of a gate.
- `lstm_eltwise` takes the four gate sums, the bias and `c_{t-1}` from the
  unit's small PMUs, and produces `c_t` and `h_t`.
- `c_t` is written back to the c-state PMU.
- `h_t` (int8) is written into the idle half of the vector buffer at byte
  position `D + n`.
- At the end of the step the two buffer halves swap.
- Elements with `n >= H`, which are padding when `H` is not a multiple of
  `HU`, are computed but never written out.

### Step timing

A time step takes about `ceil(H/HU) * NCH + PIPE + 1` cycles, where:

- `PIPE = 1 + (4+log2 LANES) + max(1, clog2 RU) + 1 + 5`.
- At the defaults `PIPE` is 18.
- The top testbench checks this count exactly.

| LSTM (H = D) | Weights | Rows per PCU (limit 4032) | Cycles per step | Reference design cycles per step |
|---|---|---|---|---|
| 256 | 512 KiB | 64 | 83 | 279 (with hu = 6, ru = 4) |
| 512 | 2 MiB | 256 | 275 | 556 |
| 1024 | 8 MiB | 1024 | 1043 | 1168 |
| 1536 | 18 MiB | 2304 | 2323 | 2448 |
| 2048 | 32 MiB | 4096 | does not fit | 4240 |

The reference design's cycle counts come from its latency per step at
1 GHz. This model has no start-up, network or host overheads, which is
why it needs fewer cycles. The H = 2048 LSTM needs 32 MiB of weights, but
the 384 PMUs hold 31.5 MiB. This model does not spill to DRAM.

## Deviations and omissions

- Fixed point instead of the 8- and 16-bit floating-point formats.
- The PCU latency is 8 cycles, not 7 (see above).
- `hu` and `ru` are build-time parameters. The reference design
  reconfigures the fabric for each benchmark; for example, its H = 256
  LSTM uses hu = 6 and ru = 4.
- The element-wise chain is fixed logic. The reference design maps it
  onto chained PCUs.
- Each MapReduce PCU owns its PMUs directly. The reconfigurable switch
  network is not modelled.
- Not built:
  - The GRU datapath.
  - DRAM address generators.
  - The host and DRAM interface.

  Weights, biases and inputs are loaded through plain write ports on the
  top.
- The reduction across the `ru` PCUs adds whole partial dot products once
  per output. The reference design accumulates after a second tree; the
  result is the same.

## Verification

Each block has a self-checking testbench in `tb/`. Every testbench:

- Prints `TB_RESULT checks=N failures=M`.
- Has a watchdog.
- Uses `$urandom` stimulus.

`tb/tb_ref_pkg.sv` holds the shared arithmetic reference.

The end-to-end test, `tb/rnn_serving_top_tb.sv`:

- Runs a small build of the engine (HU = 3, RU = 2, LANES = 4).
- Uses two sizes: H/D = 10/37 and 12/4.
- Compares every `h_t` element with a step-by-step reference model.
- Checks the step length.
- Counts each mechanism (multi-chunk and single-chunk rows, padded
  elements, second PMU, c clearing, state carry, saturation) and fails if
  any of them never happened.

`tb/rnn_full_size_tb.sv` runs the same test on the engine at its default
size, with H = D = 256 for two steps.

To simulate with Verilator, run:

```
verilator --binary --timing --assert --top-module rnn_serving_top_tb \
  -y rtl -y tb +libext+.sv rtl/rnn_pkg.sv tb/tb_ref_pkg.sv tb/rnn_serving_top_tb.sv
./obj_dir/Vrnn_serving_top_tb
```
