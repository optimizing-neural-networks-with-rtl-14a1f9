# Lookup-based KAN accelerator

Kolmogorov-Arnold Networks (KANs) put a learned non-linear function on every
edge of a fully connected network instead of a weight: neuron `j` of the next
layer is `x_j = sum_i phi_ij(x_i)`, and every `phi_ij` is different (a SiLU
term plus a B-spline with its own coefficients). Evaluating thousands of
distinct higher-order functions is slow and power hungry on CPUs and GPUs.

This design evaluates them without arithmetic. Each edge function is
quantized and stored as a truth table in FPGA lookup tables. A sample then
flows through every edge in three steps:

1. A **quantization block** rescales the incoming neuron value to the table
   index width of that edge. It uses one fixed-point multiply and a shift.
2. A **LUT pool** looks up the edge's function value.
3. Per destination neuron, an **accumulator** adds the looked-up values of all
   incoming edges.

Every edge has its own quantization block and LUT pool, and every neuron its
own accumulator. So the network is laid out in space, and its constants are
part of the logic. The RTL here is parameterised for the
(784, 64, 32, 10) MNIST network with 4-bit table inputs and 5-bit table
outputs (52,544 edges). The same modules also build other shapes and widths.

## Structure

```
 host ──wr_*──▶ input_bram ──sample──▶ kan_layer 0 ──▶ kan_layer 1 ──▶ … ──▶ offset ──▶ out_*
                  ▲   (DEPTH × N×W)      │                                     stage
 start/num ──▶ feeder FSM ─rd_en─┘       │
                                         ▼
                         per edge i→j:  quant_block ─idx─▶ lut_pool ─y─┐
                                                                         ▼
                         per neuron j:            kan_accumulator (N_IN terms)
```

| File | Role |
|---|---|
| `rtl/kan_pkg.sv` | Shared constants: 6-input fundamental LUT, widths of alpha/frac/beta, width helpers |
| `rtl/kan_model_pkg.sv` | Per-edge model constants: tables, fine-grained widths, scales, offsets |
| `rtl/quant_block.sv` | Fixed-point rescale, round and clamp to the edge's index (2 cycles) |
| `rtl/lut_pool.sv` | One edge's table, built from 64-entry LUTs plus a partition mux (1 cycle) |
| `rtl/kan_accumulator.sv` | Multi-cycle sum of a neuron's incoming values, valid/ready on both sides |
| `rtl/kan_layer.sv` | One layer: N_IN×N_OUT edges and N_OUT accumulators, with pipeline control |
| `rtl/input_bram.sv` | Sample buffer: element-wise host writes, sample-wide synchronous reads |
| `rtl/kan_accel.sv` | Top: RAM, feeder, chain of layers, output offset stage |

## Number formats: how a value crosses an edge

This is the part that needs the most care.

**Levels, not reals.** Every value in the datapath is an unsigned integer
count of some step size `s`. Let the real value be `v`. Uniform quantization
to `b` bits stores `round(clamp((v - min)/s, 0, 2^b - 1))`.

**Table outputs.** All edges that end in the same neuron share one output
step size. Their sum is then just an integer sum. Each edge's table is trimmed
to its own range (fine-grained output quantization): level 0 stands for that
function's minimum `delta_ij`, and the edge needs only enough bits to cover
its range. A lookup therefore returns `y_ij = phi_ij/s - delta_ij`. The
accumulator adds these offset-free levels, so the true neuron value is
`sum_i y_ij + sum_i delta_ij`.

**Rescaling on the next edge.** The next layer's edge `j→k` wants the neuron
as an index in its own input step `s_jk`, with its own width `b_in,jk`. The
scale is `alpha = s_prev / s_jk`. It is stored as an unsigned fixed-point
number `alpha` with `frac` fractional bits; `frac` is stored as well. The
quantization block computes

```
idx = clamp( (x*alpha + beta + 2^(frac-1)) >>> frac , 0, 2^b_in - 1 )
```

`beta` is a signed constant in the same fixed-point scale. It folds in two
things: `alpha * sum_i delta_ij` (the previous layer's level offsets, which
are restored here rather than in the accumulator), and `-min/s_jk` (the range
minimum of the edge's input grid). The clamp reproduces the clamp of uniform
quantization. Rounding is half-up.

Worked example: a 9-bit value `450` (4.5 in steps of 0.01) must go to a 4-bit
index in steps of 0.5. `alpha = 0.02 ≈ 0b0.00000101` (frac = 8). Then
`450*5 = 2250`, and `2250/256 = 8.79`, which rounds to `9`. The testbench of
`quant_block` checks this exact case.

**Output of the network.** The last layer has no next quantization block. So
`kan_accel` adds each output neuron's `sum_i delta` (`out_offset(j)`) and
returns a signed number in output steps.

**Widths.** A layer's sums are `BOUT + clog2(N_IN)` bits wide. The next layer
takes that as its input width `XW`. The first layer's input width is `IN_W`
(16 by default).

## LUT pool organisation

A pool with `b_in` inputs and `b_out` outputs has one truth table per output
bit. Each table is cut into `2^max(0, b_in-6)` partitions of 64 entries, the
size of one 6-input FPGA LUT. The low `min(b_in,6)` index bits address every
fundamental LUT at once, and the high bits select the partition. That makes
`b_out · 2^max(0, b_in-6)` fundamental LUTs per pool.

The table enters the module on the constant port `truth`. `kan_layer` ties it
to a constant from `kan_model_pkg`, and synthesis turns it into LUT contents.

## Timing, handshakes and throughput

- `quant_block`: 2 cycles (multiply; then add, shift, round and clamp).
- `lut_pool`: 1 cycle.
- `kan_accumulator`: captures all `N` terms at its input handshake. It then
  adds `LANES` terms per cycle, so the result appears `ceil(N/LANES)` cycles
  after the handshake. It can take the next sample in its last summing cycle.
  With `LANES >= N` it takes one sample per cycle.
- `kan_layer`: the three Q/LUT stages move together on one enable. They stall
  only when the accumulators cannot take the sample in the lookup stage. All
  accumulators of a layer run in lock step, and assertions check this. From
  input handshake to `out_valid` takes `3 + ceil(N_IN/LANES)` cycles.
- Between layers and at the output there is a plain valid/ready handshake.
  Different layers work on different samples at once, so throughput is set by
  the widest layer: one sample per `ceil(max N_IN / LANES)` cycles.
- `kan_accel`, from the cycle `start` is sampled to `out_valid` for the first
  sample:
  `2 + sum_l (3 + ceil(n_l/LANES)) + (L - 1)`.
  For MNIST with `LANES = 2` that is 453 cycles, or 4.53 µs at 100 MHz. The
  published implementation reports 4.74 µs for this network.

Reset (`rst_n`, asynchronous, active low) clears only control state: valid
bits, feeder state and accumulator state. Data registers are not reset.

## The model constants (`kan_model_pkg`)

Training and the quantization flow produce, for every edge, a table, its
fine-grained input and output widths, `alpha`, `frac` and `beta`. They also
produce the output offsets. In this RTL these values are functions of
`(layer, i, j)` in `kan_model_pkg`. The package shipped here holds a
**synthetic model**: values drawn from a hash of the indices. They are
shaped so that every datapath corner occurs (both index clamps, narrowed
edges, wide pools). To run a trained network, regenerate the bodies of those
functions from the trained model. Nothing else changes. The function bodies
are:

- `edge_bin`: with `FINE=1`, one edge in four loses one input bit.
- `edge_bout`: with `FINE=1`, an edge loses 0 to 3 output bits, keeping at
  least 1.
- `edge_table`: a hash of the indices and the table address.
- `edge_frac = XW + 4 - b_in`.
- `edge_alpha`: a value between 16 and 23.
- `edge_beta`: a negative offset of up to a quarter of the index range.

Trained values will differ in every respect, but the datapath treats them the
same way.

## Parameters of `kan_accel`

| Parameter | Default | Meaning |
|---|---|---|
| `NUM_LAYERS` | 3 | number of layers |
| `DIMS` | `'{784,64,32,10}` | neurons per layer boundary |
| `IN_W` | 16 | raw input element width |
| `BIN` | `'{4,4,4}` | global table input width per layer |
| `BOUT` | `'{5,5,5}` | global table output width per layer |
| `LANES` | 2 | accumulator terms added per cycle |
| `FINE` | 1 | per-edge (fine-grained) widths from `kan_model_pkg` |
| `DEPTH` | 16 | sample slots in the input RAM |

Size at the defaults, with global widths: 52,544 edges, each with 5 output
bits of a 4-input table, so 262,720 fundamental LUTs for the tables. On top
of that come a constant multiplier and an adder per edge, and 106
accumulators. The two spherical-harmonics networks
of the original evaluation are (2, 5, 1) with up to 16 or 18 table input
bits and 22 output bits. They build from the same RTL with, for example,
`DIMS='{2,5,1}, BIN='{16,16}, BOUT='{22,22}`. Such pools are large:
at 18 input bits one pool is 22 · 2^12 = 90,112 six-input LUTs. That configuration has not been
simulated here.

## Verification

Each block has a self-checking testbench in `tb/`. They compare against
`tb/kan_ref_pkg.sv`, an integer reference model that quantizes, looks up and
sums edge by edge, using the same model constants. Each testbench prints
`TB_RESULT checks=N failures=M`.

| Testbench | What it covers |
|---|---|
| `tb_quant_block` | the worked example, 2000 random cases incl. both clamps, 2-cycle latency, hold on `en=0` |
| `tb_lut_pool` | 8-bit pool (4 partitions) and 3-bit pool, every index, random tables, 1-cycle latency |
| `tb_kan_accumulator` | 7 terms, 2 lanes: sums, exact 4-cycle latency, back-to-back samples, output hold under back-pressure |
| `tb_input_bram` | element-wise writes, sample-wide synchronous reads, hold |
| `tb_kan_layer` | 3→2 layer, 7-bit pools, fine-grained widths, random gaps and back-pressure, latency 5 |
| `tb_kan_accel` | (5,4,3,2) network end to end, three runs, back-pressure, latency formula; counts clamps, narrowed edges, split pools, multi-cycle sums, stalls and overlapping samples, and fails if one never happened |
| `tb_kan_accel_mnist_tail` | the last two MNIST layers at full size, (64, 32, 10) with 2,368 edges: all 10 outputs and the 57-cycle latency |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/kan_pkg.sv rtl/kan_model_pkg.sv tb/kan_ref_pkg.sv \
  rtl/quant_block.sv rtl/lut_pool.sv rtl/kan_accumulator.sv rtl/kan_layer.sv \
  rtl/input_bram.sv rtl/kan_accel.sv tb/tb_kan_accel.sv --top-module tb_kan_accel
./obj_dir/Vtb_kan_accel
```

The default-size design has 52,544 edge instances. Verilator lint of it
takes about 5 minutes and 7.5 GB. A Verilator simulation build at that size
did not finish within 20 minutes of C++ compilation, so the full (784, 64,
32, 10) network has not been simulated. The largest configuration simulated
is the (64, 32, 10) tail of it (`tb_kan_accel_mnist_tail`, about a minute to
build and run). The first layer alone has 50,176 edges and differs from the
tested ones only in size.

## Where this RTL departs from, or adds to, the published design

- **Model data is synthetic.** No trained tables or scales are included. The
  accuracy figures of the original work cannot be reproduced with this RTL
  as shipped.
- **Accumulator rate.** The source says the accumulation is spread over
  several cycles, with handshakes. It also calls the design "fully
  pipelined", producing one output per cycle. This RTL follows the first.
  `LANES` sets the terms per cycle. The default of 2 is this design's
  choice; it gives latencies close to the published ones (453 vs 474 cycles
  for MNIST). With `LANES` at least the widest fan-in, one sample per cycle
  is reached.
- **Accumulators** are written as adders. Mapping them to DSP slices, as the
  original does, is left to synthesis.
- **Offsets.** `beta` in the quantization block carries both the folded
  level offsets and the input-range minimum. The original describes the
  offset term `alpha·delta` but not the range minimum. The output offset
  stage of the last layer is this design's addition.
- **Clamping and half-up rounding** in the quantization block are this
  design's reading of the quantization equations.
- **Input RAM layout, feeder, start/busy control, valid/ready protocol, reset
  and all widths not listed above** are this design's own.
- **Fine-grained widths** are supported per edge. The widths in the
  synthetic model are illustrative, not the published distributions (for
  example, a mean of 3.77 input bits for MNIST).
