# Tiny-VBF encoder accelerator

Tiny-VBF is a small vision transformer used as an ultrasound beamformer. It
takes time-of-flight-corrected channel data from a single plane-wave
transmission and produces a beamformed IQ image. Its encoder is a short
chain of transformer blocks working on 184 patches of dimension 64. Each
block has a layer normalisation, four-head self-attention with 16 dimensions
per head, skip connections and dense layers.

This RTL implements an accelerator for that encoder. It uses three on-chip
memories, a 64-multiplier dot-product array and a few row-wise units for
layer normalisation, softmax, addition, ReLU and scaling. A host loads
activations and weights, then issues one command per layer operation. The
design is written in SystemVerilog 2017 and can be synthesised. It is
parameterised to the model's sizes: 16-bit activations, 8-bit weights,
24-bit softmax internals, 4 processing elements (PEs) of 16 multipliers
each, and 184 × 64 activations.

## The big picture

```
          cmd queue (4) ──► dispatcher ──┬──► dot_engine ──────────────────────┐
host ─┬─► cmd_valid/ready                │     line reads A,B,bias             │ masked line writes
      │                                  │     pe_array (4 × pe)               │
      │                                  │     accum_concat                    │
      │                                  └──► row_engine ──────────────────────┤
      │                                        layer_norm (divider, isqrt)     │
      │                                        softmax_unit (divider)          │
      │                                        eltwise_unit                    │
      │                                                                        ▼
      └─► host_wr/host_rd ─────────► act_mem = Input BRAM + Output BRAM   Weight BRAM
```

`tvbf_accel` is the top module. It holds a four-entry command queue, runs
one command at a time and gives the memory ports to whichever engine is
active:

- **Matrix multiplications** go to `dot_engine`. This covers dense layers,
  the Q/K/V projections, the attention scores Q·Kᵀ and attention × value.
- **Row operations** go to `row_engine`. This covers LN, softmax, add, ReLU
  and scaling.

While nothing is queued or running (`busy` low), the host can read and
write single elements.

A transformer block is therefore a program of commands. It starts with
one `OP_LN`, Xln = LN(X) row by row. Each attention head then runs:

| # | command | what it computes |
|---|---------|------------------|
| 2–4 | `OP_MATMUL`, B from weights, bias | Q = Xln·Wq + bq, K = Xln·Wk + bk, Vᵀ = (Xln·Wv + bv)ᵀ |
| 5 | `OP_MATMUL`, quad mode | S = Q·Kᵀ (184 × 184) |
| 6 | `OP_SCALE` shift 2 | S / √16 |
| 7 | `OP_SOFTMAX` | A = softmax(S) per row |
| 8 | `OP_MATMUL` | O = A·V (three 64-element parts, last one masked) |
| 9 | `OP_MATMUL`, quad mode, B from weights | the head's own 16 × 16 dense, C[:, 16h … 16h+15] = O·Wd + bd |

After the four heads, the block continues:

| # | command | what it computes |
|---|---------|------------------|
| 1 | `OP_ADD` | skip connection |
| 2 | `OP_LN` | second normalisation |
| 3 | `OP_MATMUL` with `relu` | first MLP dense layer |
| 4 | `OP_MATMUL` | second MLP dense layer |
| 5 | `OP_ADD` | skip connection |

Heads are concatenated in place. Head *h* writes its 16 output columns at
column offset 16·*h* of a 64-wide output matrix.

The per-head dense has a dot length of only 16, so it runs in quad mode.
The head output O is stored compactly with a row stride of 16, and four
weight columns share one line. One attention head needs 3,392 weights and
biases, while the whole block needs 21,888. The host therefore reloads the
Weight BRAM between heads, during the idle gaps.

## Memories and addressing

Every memory is organised in **lines of 64 elements**. One line is exactly
one operand of the PE array (4 PEs × 16). Each memory is a `line_ram`:

- two read ports returning a whole line one cycle after the request;
- one write port with a per-element write mask.

| memory | default depth | elements | element width |
|--------|---------------|----------|---------------|
| Input BRAM | 256 lines | 16,384 | 16 |
| Output BRAM | 1,024 lines | 65,536 | 16 |
| Weight BRAM | 256 lines | 16,384 | 8 |

Activations use one 17-bit element address space. Addresses below
`OUT_BASE = 0x10000` are the Input BRAM; addresses from `OUT_BASE` up are
the Output BRAM. Any command can read from and write to either memory.
Weights and biases have their own 14-bit address space.

All matrices are stored row-major with a programmable row stride. The B
operand of a multiplication is stored as the rows of **Bᵀ**, so that a
column of B is one contiguous run of memory:

- A weight matrix is loaded transposed. Row *n* of the array is column *n*
  of W.
- For Q·Kᵀ, K is used as stored.
- For A·V the value projection writes V transposed. It does this with
  output strides `o_rs = 1` and `o_cs = 192`, so each column of V becomes a
  row of Vᵀ.

## The command (`tvbf_pkg::cmd_t`)

| field | meaning |
|-------|---------|
| `op` | `OP_MATMUL`, `OP_LN`, `OP_SOFTMAX`, `OP_ADD`, `OP_RELU`, `OP_SCALE` |
| `m`, `n`, `kd` | rows, columns (elements per row for row ops), dot length |
| `a_base`, `a_stride` | first operand: row *r* at `a_base + r·a_stride` |
| `b_base`, `b_stride` | second operand (rows of Bᵀ, or the addend of `OP_ADD`) |
| `b_wgt` | MATMUL: B comes from the Weight BRAM |
| `o_base`, `o_rs`, `o_cs` | result (r, c) at `o_base + r·o_rs + c·o_cs` (`o_cs` must be 1 for row ops) |
| `quad` | MATMUL quad mode (see below) |
| `bias_en`, `bias_base`, `bias_lsh` | add `W[bias_base + n] << bias_lsh` to output column *n* |
| `shift` | rounding right shift of MATMUL results, or the `OP_SCALE` shift |
| `relu` | ReLU on MATMUL results |

The rules that the hardware relies on are:

**Sum mode (`quad = 0`):**
- `a_base`, `a_stride`, `b_base` and `b_stride` are multiples of 64.
- Rows with `kd > 64` are split into 64-element parts and accumulated.
- Lanes beyond `kd` are masked to zero.

**Quad mode (`quad = 1`):**
- `kd ≤ 16`.
- `b_stride = 16`, `b_base` is 64-aligned and `o_cs = 1`.
- Each output row starts on a multiple of 4.

Assertions in `dot_engine` flag three violations:
- a quad command with `kd > 16`;
- a multi-part sum command whose A rows are not 64-aligned;
- a quad write that would cross a line boundary.

## Number formats

| quantity | format |
|----------|--------|
| activations | 16-bit two's complement, 10 fraction bits (1.0 = 1024) |
| weights, biases | 8-bit two's complement, 6 fraction bits |
| PE products and sums | full precision (32-bit products, 36-bit PE sums, 38-bit array sums, 48-bit accumulators) |
| softmax exponentials and reciprocal | 24 bits (exponentials with 22 fraction bits); the sum is kept SW + IW bits wide so a 512-element row cannot overflow |

**Matrix multiplication results.** The raw sum has `FRAC + WFRAC` fraction
bits for activation × weight, or `2·FRAC` for activation × activation. The
`shift` field brings the result back to 10 fraction bits:

- `shift = 6` after a dense layer;
- `shift = 10` after Q·Kᵀ and A·V.

Rounding is to nearest, with ties going up, and the result then saturates to
16 bits. A bias is in weight format. Shifting it left by `bias_lsh = 10`
aligns it with an activation × weight sum.

## Dot-product path (`dot_engine`, `pe_array`, `pe`, `accum_concat`)

Each clock the engine reads one line of A and one line of B, which loads
the eight 16-element operand buffers inp1 … inp8. The `pe_array` then does
one of two things:

- **Sum mode** adds its four PE results into a single 64-element dot
  product. Longer dot products arrive as consecutive parts.
  `accum_concat` keeps one accumulator per lane and adds the parts: the
  first part loads the accumulator and the last releases it. On release it
  applies the bias, the rounding shift, ReLU and saturation. The engine
  then writes the single result with a one-element mask.
- **Quad mode** returns the four PE results separately. The same
  16-element query row is broadcast to all four PEs, and the B line holds
  four consecutive key rows. The engine produces four attention scores per
  cycle and writes them with one masked line write.

The loop order is row *m* (outer), column *n*, then part (inner). Every
part is tagged with its destination and first/last flags. The tag travels
down a pipeline matched to the datapath latency:

- 1 cycle for the memory read;
- 1 cycle for the operand buffers;
- 3 cycles for the PE array (2 in the PEs, 1 for the final adder);
- 1 cycle for accumulation.

There is no back-pressure anywhere. A command takes one cycle per part,
plus 8 cycles of pipeline fill.

| operation at the model's size | parts | cycles |
|-------------------------------|-------|--------|
| Q, K or V projection (184 × 16, kd = 64) | 2,944 | 2,952 |
| Q·Kᵀ in quad mode (184 × 184, kd = 16) | 8,464 | 8,472 |
| A·V (184 × 16, kd = 184, three parts) | 8,832 | 8,840 |
| dense 184 × 4, kd = 64, bias + ReLU | 736 | 744 |

## Row path (`row_engine`, `layer_norm`, `softmax_unit`, `eltwise_unit`, `divider`, `isqrt`)

Row operations read the memory one element per clock. Each operand uses
one line read port, and the element is picked out of the returned line.
Add uses both read ports.

**Element-wise ops.** Add, ReLU and scaling stream through the
combinational `eltwise_unit`, writing one element per cycle. A row takes
n + 2 cycles.

- Add saturates.
- Scaling is an arithmetic right shift rounded to nearest. With k = 16,
  1/√k is exactly a shift by 2.

**Layer normalisation** makes three passes over a row:

1. The sum is divided by the length to give the mean (truncated toward
   zero).
2. The squared deviations are summed and divided by the length to give the
   variance. `isqrt` takes its root, and the divider forms
   inv = 2²⁰ / std, where std is at least 1 LSB; this is the ε.
3. Each output is y = ((x − mean)·inv + 2⁹) >> 10, saturated.

The learned scale and offset (γ, β) are not applied. Every normalisation in
the network feeds a dense layer, into which they fold exactly:
W' = diag(γ)·W and b' = b + βW. A 64-element row takes about 368 cycles.

**Softmax** also makes three passes:

1. Find the row maximum.
2. Compute eᵢ = exp(xᵢ − max) as 2^((xᵢ − max)·log₂e). The integer part
   of the exponent becomes a right shift. The fractional part *f* goes
   through 1 + 2689/4096·f + 1407/4096·f², which is within 0.3 % of 2^f.
   eᵢ is 24 bits with 22 fraction bits, and the eᵢ are summed. One
   division then gives R = 2⁴⁵ / Σe.
3. Recompute eᵢ and write pᵢ = (eᵢ·R + 2³⁴) >> 35. This is the
   probability with 10 fraction bits.

A row of 184 scores takes about 610 cycles.

`divider` is a restoring divider that produces one quotient bit per cycle
(48 bits, 48 cycles). `isqrt` is a digit-by-digit square root that produces
one root bit per cycle (32-bit radicand, 16 cycles). Both are used only
once or twice per row.

## Host interface and timing

| port | direction | meaning |
|------|-----------|---------|
| `cmd_valid`, `cmd_ready`, `cmd` | in, out, in | command queue, 4 entries; a command is taken when valid and ready are both high at a clock edge |
| `busy` | out | a command is queued or running |
| `cmd_done` | out | one-cycle pulse per finished command |
| `host_wr_en`, `host_wr_wgt`, `host_wr_addr`, `host_wr_data` | in | write one activation element (`host_wr_wgt = 0`) or one weight (`= 1`, low 8 bits) |
| `host_rd_en`, `host_rd_addr`, `host_rd_data` | in, in, out | read one activation element; data one cycle later |

The host ports are honoured only while `busy` is low. Reset (`rst_n`) is
active low and synchronous. It clears the queue and the engines, but not
the memories.

The full-size test runs one attention head, a skip connection, a ReLU and
a dense layer: 11 commands, about 250,000 cycles of work. At the 100 MHz
clock of the original FPGA implementation that is 2.5 ms. The row path
dominates:

- the softmax over 184 × 184 scores takes 112 k cycles;
- the LN of 184 rows takes 68 k cycles;
- the scaling pass takes 35 k cycles;
- the four matrix multiplications together take 23 k cycles.

## How far this follows the original design

**Taken from the original design:**
- the three BRAMs (Input, Output and Weight);
- four PEs, each with 16 multipliers and an adder tree;
- the operand buffers inp1 … inp8, loaded with rows and columns of input
  and weight;
- the three dataflows:
  - the query/key/value projections;
  - attention scores on the four PEs;
  - attention × value and dense layers, with partial results accumulated;
- the accumulation/concatenation stage;
- the non-linear units: LN, softmax, ReLU, add, scaling, division and sqrt;
- the problem sizes: 184 patches, 64 dimensions, 4 heads, k = 16;
- the Hybrid-2 word widths: 8-bit weights, 16-bit data, 24-bit softmax.

**This design's own choices:**
- all control, including the command set and queue, strides and host
  ports;
- the 64-element line organisation and the memory sizes;
- the fraction-bit split;
- the LN, softmax, divider and square-root algorithms;
- rounding and saturation;
- omitting γ and β in LN;
- storing weights transposed and writing V transposed.

**Known differences:**
- The original lists "Mul/Add ops 16 bits" for Hybrid-2. Here the products
  and sums keep full precision, and results are rounded to 16 bits only
  once, after accumulation. A bit-exact match with 16-bit intermediate
  arithmetic would need a truncation after each PE. The amount is not
  specified, so it was not added.
- The size of the per-head dense and of the MLP layers is not known; both
  tests use 16 × 16 and 64 × 64.
- Only the encoder is accelerated. The decoder's dense, LN and add layers
  can be written with the same commands, but that program is not tested.
- Time-of-flight correction, the host processor and external memory are
  outside this design. A whole model (about 1.5 M weights) or a whole
  frame (368 × 128 samples × 128 channels) does not fit on chip. The host
  streams weights and activations in slices. One head's weights fit; a
  whole block's do not.
- The original FPGA build reports about 62 k LUTs, 110 BRAMs and 274 DSPs
  for Hybrid-2. It gives no memory sizes and no latency, so neither can be
  compared. This design holds about 1.4 Mbit of memory and 64 multipliers
  in the PE array.

## Files and simulation

`rtl/` has one module or package per file:

- `tvbf_pkg` (types, constants, command)
- `tvbf_accel` (top)
- `act_mem`
- `line_ram`
- `dot_engine`
- `pe_array`
- `pe`
- `accum_concat`
- `row_engine`
- `layer_norm`
- `softmax_unit`
- `eltwise_unit`
- `divider`
- `isqrt`

`tb/` has a self-checking testbench `tb_<module>` for every block except
`act_mem` and `row_engine`, which are tested through the top. Each
testbench computes its expected values independently and prints
`TB_RESULT checks=… failures=…`. `tb_tvbf_accel` is the end-to-end test. It
runs at the default parameters with one attention head at full size and
checks about 58,000 elements against a shadow model.

`tb_tvbf_block` runs a complete transformer block: LN, four heads with
their own dense layers, concatenation, skip, LN, MLP and skip. That is 38
commands with five weight reloads, about 937,000 cycles. It compares the
concatenated attention output and the block output with the same kind of
model. The MLP width is not known for the network and is taken as 64.

`tb_tvbf_embed` runs the front end of the encoder on slices of real size.
The per-pixel projection takes 128 channels to 16 features, one 128-pixel
slice at a time, and each slice fills the Input BRAM. The projected pixels
land in memory as two reshaped 4096-value patch rows. The patch-embedding
dense layer then runs with 4096-long dot products (64 accumulated parts),
and the position-embedding addition follows. It also counts each
mechanism: queue-full stall, quad mode, multi-part accumulation, masked
tail writes, bias, transposed write, ReLU clamp, saturation, LN, softmax,
scale, add and ReLU. Any mechanism that never occurred counts as a failure.

To simulate with Verilator 5, for example the top:

```
verilator --binary --timing --assert -Wno-fatal -Mdir obj --top-module tb_tvbf_accel \
    -y rtl rtl/tvbf_pkg.sv rtl/tvbf_accel.sv tb/tb_tvbf_accel.sv
./obj/Vtb_tvbf_accel
```

It runs in about one second. Other testbenches build the same way with
their module's file and testbench.
