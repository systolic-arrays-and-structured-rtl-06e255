# A weight-stationary FP32 / INT8 systolic array for tile-pruned transformers

Transformer inference is dominated by matrix multiplications. On a small edge
system, these can be handed to a systolic array one tile at a time. The array
here is a square mesh of N x N processing elements (PEs). It holds one N x N
tile of weights and streams activations through it. Structured pruning at the
same granularity is the key idea: whole N x N weight tiles whose L1 norm is
smallest are set to zero. The host never loads or computes a zero tile, so
pruning turns directly into saved time. The array needs no sparsity logic at
all. The other saving comes from the weights. They can be quantized to INT8
(sign and magnitude), four of them travel in one 32-bit word, and each PE then
needs only a cheap FP32 x INT8 multiplier instead of a full FP32 one.

This RTL implements the array unit: the PEs with both multiplier types, the
input and output skew registers, the activation buffers and the decoding of
the three instructions the host core uses to drive the unit. The default is
the 32 x 32 array with INT8 weights (`N = 32`, `WEIGHT_INT8 = 1`). The
published study evaluates this configuration together with 4 x 4 to 16 x 16
arrays and an all-FP32 variant. Both are available through the two
parameters.

## How a GEMM runs on it

The host computes `Y = X * W`, with `X` of size M x K and `W` of size K x NO.
`W` is cut into N x N tiles. For each tile `(kt, nt)` that is not all zero,
the host does the following:

1. It programs the weights with `OP_LOAD_W`. This takes N*N/4 words with INT8
   weights, or N*N words with FP32 weights.
2. For each of the M rows of the matching `X` slice, it issues N `OP_STREAM`
   instructions, one per activation, and then one `OP_COMPUTE`.
3. It keeps streaming rows of zeros until the last result has come out, which
   takes `sa_latency(N) = 2N + 2` further compute steps.
4. It adds each returned row element-wise into `Y`. Partial results of
   different `kt` are summed in software; the array does not accumulate across
   tiles.

Every `OP_STREAM` also returns one element of the current output vector. So
the activations in and the results out share the same instructions, one 32-bit
value each way. A tile costs `words + (N + 1) * (M + 2N + 3)` instructions
with the schedule used in the testbenches. A pruned tile costs nothing.

```
             In buffer     input skew           N x N PE mesh         output de-skew
 OP_STREAM ─► [N x FP32] ─► row i: i+1 regs ─►  a ──► a ──► a ──►    col j: N-j regs ─► Out vector
                                               │ps    │ps    │ps                         │
                                               ▼      ▼      ▼                           ▼
                                              (partial sums flow down)        OP_STREAM response
```

## Instruction interface (`systolic_array`)

| port | width | meaning |
|------|-------|---------|
| `cmd_valid` | 1 | an instruction is presented this cycle (one per cycle, never stalled) |
| `cmd_op` | 2 (`sa_op_e`) | `OP_LOAD_W` = 0, `OP_STREAM` = 1, `OP_COMPUTE` = 2 |
| `cmd_addr` | `AW` = 16 | weight word address (`OP_LOAD_W` only) |
| `cmd_data` | 32 | weight word, or the input activation (FP32) |
| `rsp_valid`, `rsp_data` | 1, 32 | result of the `OP_STREAM` issued in the previous cycle |

- `OP_STREAM` writes `cmd_data` into `In[idx]`. In the same cycle it latches
  `Out[idx]` into `rsp_data`. It then advances `idx` modulo N.
- `OP_COMPUTE` moves the whole datapath by one step and resets `idx` to 0. In
  that step, the skew registers take the In buffer, every PE register moves,
  and the de-skew registers move.
- `OP_LOAD_W` writes PE weight registers. It does not disturb data in flight.
  Still, a host normally drains the array before it changes tiles, because
  products already in the pipeline would otherwise mix the two tiles.

The whole datapath advances only on `OP_COMPUTE`. Its clock enable is the
decoded instruction, so the array does no work while activations are being
transferred. The N-instruction transfer of each vector is far longer than the
PE pipeline, and this is how the pipeline latency stays hidden behind the I/O.

Two assertions state the host's rules: no undefined opcode, and no weight
address beyond the last word (N*N/4 or N*N).

### Latency, step by step

Call the compute that takes input vector `v` step `s0`. Then:

| after step | where `v` is |
|------------|--------------|
| `s0 + i` | element `v[i]` leaves the input skew (row i has i+1 registers) |
| `s0 + i + j + 1` | `v[i]` is in the input register of PE (i, j) |
| `s0 + i + j + 2` | its product is in the PE's product register |
| `s0 + i + j + 3` | PE (i, j)'s accumulation register holds `sum_{r<=i} v[r] * W[r][j]` |
| `s0 + N + j + 2` | column j's result leaves the bottom row |
| `s0 + 2N + 2` | all N results are aligned in the last de-skew stages (column j has N-j stages) |

So the result of the k-th compute can be streamed out after compute
`k + 2N + 2`. In the stream phase right before that compute, the host still
reads zeros (or the previous tile's drain), and the testbenches check this.

## The processing element (`sa_pe`)

Each PE has four registers:

- the input register (FP32), which also feeds the PE to the right;
- the weight register (INT8 or FP32);
- a product register after the multiplier;
- the accumulation register (FP32). It holds `psum_in + product`, and it is
  the partial sum passed to the PE below.

The top row receives +0. The product register is the pipeline cut between the
multiplier and the adder. Because of it, each row of the mesh sees its
activations exactly one step after the row above, which is the skew the input
shift registers provide. Weights are written by address. With INT8 weights,
word `r*(N/4) + g` holds `W[r][4g+k]` in byte `k` (bits `8k+7:8k`). With FP32
weights, word `r*N + c` holds `W[r][c]`. Row `r` of the tile multiplies input
element `r`, and column `c` produces output element `c`.

## Hybrid FP32 x INT8 multiplier (`fp32_int8_mul`)

The INT8 weight is a sign bit plus a 7-bit magnitude. The multiplier works as
follows:

- The output sign is the XOR of the two signs.
- The activation's 24-bit significand (hidden 1 restored) is multiplied by the
  magnitude. This gives a 31-bit integer whose leading 1 lies in bits 30..23.
- A priority search over bits 30:23 finds that leading 1 at offset k (0..7).
- The exponent becomes `e + k`. The significand is shifted right by k, and
  bits 22:0 are kept. This truncates the result, which is rounding toward
  zero.
- A zero activation or a zero magnitude cannot go through this path. A final
  multiplexer outputs +0 instead.

The unit needs a 24 x 7 multiplier, an 8-bit adder and a small shifter. That
is far less than a 24 x 24 multiplier, and it is where the INT8 variant saves
area and power.

## Number rules

All arithmetic follows one convention:

- Only normal numbers and zero are handled.
- A subnormal input (exponent field 0) is read as zero.
- A result that underflows, and an exact cancellation, give +0.
- Infinities and NaNs are not produced or recognised, and an exponent overflow
  wraps.
- Every unit truncates, rounding toward zero.

The FP32 adder (`fp32_add`) aligns the smaller operand in a field with 26
guard bits and a sticky bit, so its result equals the exact sum truncated. The
FP32 multiplier (`fp32_mul`) truncates its 48-bit product. With these rules
the results are bit-exact and easy to predict, but they are **not IEEE-754
round-to-nearest**. A column's result is accumulated in a fixed order, from
row 0 down, so a software reference must add in the same order to match bit
for bit.

## Sizing transformer layers

The array never stores a whole matrix. It holds one tile, so any GEMM whose
dimensions are multiples of N runs unchanged, one tile after another. The
speech models that motivate this design have model widths of 512 or 128,
feed-forward widths of 2048 or 1024, and attention-head widths of 32 to 128.
All of these are multiples of 32. A 512 x 2048 feed-forward weight matrix, for
example, is 16 x 64 = 1024 tiles of 32 x 32. With 20 % of its tiles pruned,
819 are loaded and 205 are skipped. The sequence length sets only the number
of rows M streamed per tile. Longer sequences spread the fixed costs of a tile
over more rows. Those costs are the `2N + 2` drain steps and the 256-word
weight load.

## Parameters

| module | parameter | default | meaning |
|--------|-----------|---------|---------|
| `systolic_array`, `sa_mesh` | `N` | 32 | array is N x N; must be a multiple of 4 with INT8 weights |
| | `WEIGHT_INT8` | 1 | 1: INT8 sign-magnitude weights and the hybrid multiplier; 0: FP32 weights and multiplier |
| | `AW` | 16 | width of the weight word address |
| `sa_input_skew`, `sa_output_deskew` | `N` | 32 | rows / columns |
| `sa_pe` | `WEIGHT_INT8` | 1 | as above |

## Files

`rtl/`:

- `sa_pkg.sv`: the `fp32_t` struct, the opcodes, `sa_latency()` and
  `sa_weight_words()`.
- `fp32_int8_mul.sv`, `fp32_mul.sv`, `fp32_add.sv`: the arithmetic units
  (combinational).
- `sa_pe.sv`, `sa_mesh.sv`: the PE and the N x N mesh.
- `sa_input_skew.sv`, `sa_output_deskew.sv`: the skew and de-skew shift
  registers.
- `systolic_array.sv`: the top level. It holds the In buffer, the instruction
  decode and the response register.

`tb/`:

- `fp_ref_pkg.sv`: the reference arithmetic for the testbenches. It is written
  independently of the RTL: products in double precision, sums as exact
  300-bit integers, then truncation.
- `sa_gemm_host.sv`: a behavioural model of the host library routine. It
  builds random operands, prunes the lowest-L1 tiles, runs the tiled GEMM
  through the instruction port, checks every partial result and the final
  product, and counts each mechanism.
- `tb_<module>.sv`: one self-checking testbench per module. Each ends by
  printing `TB_RESULT checks=... failures=...`.
- `tb_systolic_array.sv`: end-to-end test at 4 x 4 in both weight formats.
  It fails if a pruned tile is never skipped, or if no zero activation or
  zero weight ever occurs.
- `tb_systolic_array_full.sv`: the default 32 x 32 INT8 array on a
  64 x 64 weight matrix with one pruned tile.

## Simulating

With Verilator 5 (the testbenches use timing controls):

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_systolic_array \
    -y rtl -y tb +libext+.sv -Irtl -Itb rtl/sa_pkg.sv tb/fp_ref_pkg.sv tb/tb_systolic_array.sv
./obj_dir/Vtb_systolic_array
```

Replace the top-module name and the last file to run any other testbench.
Lint a module with `verilator --lint-only -Wall -y rtl rtl/sa_pkg.sv rtl/<module>.sv`.

The unit and 4 x 4 tests finish in seconds. The 32 x 32 test needs about a
minute, mostly for compilation.

## What is this design's own choice

The published description gives the following: the PE contents, the mesh and
its data directions, the skew registers, the hybrid multiplier, the three
instruction kinds, the 32-bit interface with four INT8 or one FP32 weight per
word, and the host-side skipping of zero tiles.

It leaves open the details below, which were chosen here:

- **Instruction encoding and handshake.** The two-bit opcode, the one-cycle
  response and the shared In/Out index are this design's.
- **Step gating.** The datapath moves only on `OP_COMPUTE`.
- **Pipeline depth.** The description says the multiplier and the adder are
  pipelined but gives no depth. Here there is one register after the
  multiplier, and the adder result goes straight into the accumulation
  register.
- **Weight loading by address.** Weights are written into the PEs by address,
  not shifted in through the mesh. The address map is this design's.
- **Skew depths.** Rows have 1..N registers and columns N..1. The description
  only says the depths vary.
- **Arithmetic units.** The FP32 adder and multiplier of the original come from
  an external floating-point library that is not described. The ones here are
  minimal units that follow the number rules above, including truncation.
  Results can therefore differ in the last bit from an IEEE round-to-nearest
  implementation.
- **Quantization scale.** INT8 weights are used as plain integers. Any
  per-tensor scale has to be applied by software.
- **Reset.** All registers, including the weights, are cleared by an
  asynchronous active-low reset.

Not part of the RTL:

- the host core, its caches and main memory;
- the pruning and quantization software (only modelled in the testbench host);
- the non-GEMM parts of the transformer (softmax, normalisation), which run on
  the core.

The arithmetic units are combinational, with one register cut in each PE. The
original design was synthesised for 1 GHz in a 28 nm process. This RTL has not
been through timing closure. Generic open-source synthesis of the full
32 x 32 array (1024 PEs) is slow.

Lint notes: the unused bits Verilator reports (`aligned[30:23]` in the hybrid
multiplier, the discarded bits of `sn` in the adder, the activations leaving
the right edge of the mesh) are discarded on purpose. The `rst_n`
sync/async note comes from the assertions' `disable iff`.
