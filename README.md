# TTD linear operation on a group vector systolic array

This is synthesizable SystemVerilog for the linear-layer engine of an LLM
accelerator. The weights of each layer are compressed with a tensor-train
decomposition (TTD), quantised to INT4, and evaluated directly in compressed
form. A weight matrix W of size N x M, with N = n1·n2·…·nd and
M = m1·…·md, is never rebuilt. It is stored as d small cores
G_k[i_k·r_{k-1}+a, j_k·r_k+b], and y = W·x is computed as d matrix products
("stages") in sequence. Each stage consumes the previous stage's output.
Every product runs on one array of vector PEs, the group vector systolic
array (GVSA). Features are FP16, weights are INT4 with one FP16 scale per
weight vector, and the arithmetic inside the PE is block floating point.

The top module `ttd_linear_op` does the following:
- It fetches the cores over an AXI4 port ("HBM").
- It fetches features, BN parameters and an optional residual over a second
  AXI4 port ("DDR").
- It runs the d stages through the GVSA, passing intermediates through a
  ping-pong buffer.
- It applies BN and the residual to the last stage's result and writes y back
  over the DDR port.

The default parameters are TIN = 128 lanes per vector, TOUT = 32 weight
vectors in the array, and TN = 16 vectors per group. At these defaults the
engine holds every tensor-train layer of ChatGLM3-6B and LLaMA2-7B at rank 16.

## The stage computation

Stage k treats its input as a matrix P_{k-1}[s, t] and computes

    Pbar_k[t, jc] = sum_s G_k[s, jc] · P_{k-1}[s, t]

The indices are:
- s = i_k·r_{k-1} + a: the summation index, I_k = n_k·r_{k-1} values, rank
  index fastest.
- jc = j_k·r_k + b: the output column, J_k = m_k·r_k values.
- t: all remaining indices, T_{k-1} = n_{k+1}…n_d · m_1…m_{k-1} rows. The
  order is (i_{k+1} slowest, …, i_d, j_1, …, j_{k-1}).

Stage 1 reads x in this form directly (the host supplies it in that layout).
After stage d the result is y in row-major (j_1 … j_d) order.

The work is tiled as follows:
- Features are tiled into TOUT rows × TIN lanes.
- Weights are tiled into TOUT output columns × TIN lanes.
- There are K = ceil(I/TIN) summation blocks, MT = ceil(J/TOUT) column tiles
  and TT = ceil(T/TOUT) row tiles.

The controller loops with rows innermost, then the summation block, then the
column tile, then the row tile (outermost). A block is TOUT cycles: one
feature vector enters the array per cycle. A stage of B = TT·MT·K blocks
issues for (B+1)·TOUT cycles, because weights are streamed one block ahead.
It then drains the pipeline before the next stage starts.

## GVSA and the DSP-shared PE (`gvsa`, `vector_pe`, `dsp_shared_mul`)

**Weight streaming.** The array holds TOUT weight vectors, which stay fixed
while the TOUT features of a block stream past. One new weight vector (with
its scale) arrives per cycle into a shadow register of its row. When the
first feature of the next block reaches a group, all rows of that group copy
their shadow values. In this way loading is hidden under computation.

**Groups.** The rows are split into TOUT/TN groups. A feature enters group 0
and moves to the next group one cycle later. Deskew registers delay earlier
groups, so all TOUT results of one feature leave together. The latency from
feature to result is TOUT/TN + 5 cycles.

**PE sharing.** Adjacent rows share one `vector_pe`. Each lane of the PE is
one 27×18 DSP multiply that yields two products at once, a·w0 and a·w1, by
packing w1 22 bits above w0 in the pre-adder. a is the FP16 mantissa in
12-bit two's complement. The low product is P[15:0]. The high product is
P[37:22] + P[21]; the +P[21] repays the borrow a negative low product leaves
in the upper field.

**PE pipeline.** The PE has five register stages:
1. Input capture.
2. Mantissa and exponent split.
3. DSP products and shift amounts against the largest exponent in the vector.
4. Two aligned adder trees.
5. Scale multiply.

Products get GUARD = 16 fraction bits before the right shift; bits beyond
that are truncated (floor). The result is an unnormalised
{mantissa, exponent} pair (`pe_res_t`).

## Accumulation and rounding (`accumulator`, `ttd_pkg`, `bn_res`)

**Accumulation.** The K partial sums of a TOUT×TOUT tile are added exactly,
in 112-bit fixed point with 48 fraction bits, one register row per tile row.
A row is released one cycle after its last summation block.

**Rounding between stages.** A released row of an inner stage is rounded to
FP16 (round to nearest even) and written to the ping-pong buffer.

**Last stage.** The row instead goes to `bn_res`, which computes
y = acc·γ + β (+ res) exactly and rounds once to FP16. With BN off, γ = 1
and β = 0. The parameters are loaded into on-chip arrays (MAXM = 16384
entries) before the first stage.

## Reordering between stages (`reorder_agu`, `pingpong_buffer`)

This is the least obvious part. Stage k produces rows t of Pbar_k, but stage
k+1 wants P_k[s', t'], with:
- s' = i_{k+1}·r_k + b (the new summation index, spread over lanes);
- t' = rest·m_k + j_k (the new row index, over addresses).

Here t = i_{k+1}·R + rest, with R = T_{k-1}/n_{k+1}.

**Write address.** For each of the TOUT results of a row, the address
generator computes:
- address = (t'/TOUT)·(K_{k+1}·TOUT) + (s'/TIN)·TOUT + t' mod TOUT
- lane = s' mod TIN

Reading one address across all lanes then yields exactly the next stage's
feature vector. The next stage reads this layout with the same (row tile,
block, row) order as stage 1's feature buffer.

**Write ports.** The TOUT writes of one row go to scattered (address, lane)
pairs, so the buffer accepts TOUT independent element writes per cycle.

**Banks.** Stage k writes bank (k−1) mod 2 and reads bank k mod 2 (stage 1
reads the feature buffer).

**Final stage.** The last stage writes y linearly (address y/TIN, lane
y mod TIN). The DMA then streams that bank out. Elements outside the T×J
matrix (padding) are not written. Padding lanes and rows are masked to zero
on read.

Ranks must be powers of two. The division by R is one divider per cycle.

## Control and DMA (`ttd_ctrl`, `axi_read_master`, `ddr_dma`)

**Registers.** The host writes 32-bit registers, then writes 1 to register
22. Busy and done report progress.

| reg | content |
|---|---|
| 0 | d (≤ MAXD = 4) |
| 1–4 | n_1..n_4 |
| 5–8 | m_1..m_4 |
| 9–13 | log2 r_0..r_4 |
| 14 | bit 0 BN enable, bit 1 residual enable |
| 15, 16 | HBM byte address of cores, scales |
| 17–21 | DDR byte addresses of features, γ, β, residual, output |

**Memory layouts** (DW = 512-bit beats):
- Cores: stage after stage, in the order (column tile, block, row). Lane l of
  word (mt, kk, row) holds G_k[kk·TIN+l, mt·TOUT+row] as INT4.
- Scales: one word of TOUT FP16 values per column tile.
- Features: (row tile, block, row), TIN FP16 per word.
- γ, β, residual and output: linear FP16.

**DMAs.** Both issue AXI4 INCR bursts of up to 16 beats. A burst never
crosses 4 KiB, and there is one burst outstanding.

## Verifying and simulating

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=F`.

```
verilator --binary --timing -Irtl -Itb rtl/ttd_pkg.sv tb/tb_fp16_pkg.sv \
  rtl/*.sv tb/axi_mem_model.sv tb/tb_ttd_linear_op.sv --top-module tb_ttd_linear_op
./obj_dir/Vtb_ttd_linear_op
```

**Reduced-size end-to-end test.** `tb_ttd_linear_op` (TIN 16, TOUT 8, TN 4,
64-bit AXI) runs a random layer twice, with n = [4,8,3,2], m = [3,2,5,2] and
ranks [1,4,4,2,1]:
- It compares every output bit-exactly with a reference, computed from the
  tensor indices, that models the PE's block alignment.
- It checks the issue cycle count.
- It fails if any mechanism never occurred: weight swaps, multi-block
  accumulation, lane and row padding, ping-pong reads, BN/Res, split bursts
  and AXI back-pressure.

**Full-size test.** `tb_ttd_linear_op_full` runs the top at its default
parameters on a 4096×4096 layer shaped like ChatGLM3-6B's attention output
projection. It checks all 4096 outputs and takes about a minute in Verilator.

**Fault tests.** Each testbench was also run against a copy of its block with
one deliberate fault, and each copy failed.

**Cycle estimate.** For the 4096×4096 layer the array issues for 1920 cycles
(15.4 µs at 125 MHz), plus DMA and drain time.

## Departures and limits

- **Numeric formats are own choices:** the scale format (FP16 per weight
  vector), GUARD bits, the accumulator format, the rounding mode, and the
  pairing of rows on a shared PE.
- **BN is modelled as a per-neuron affine transform;** the residual is a
  stored FP16 vector.
- **The ping-pong buffer is a register array with TOUT write ports.** It is
  large: 2 × 512 × 128 FP16. A block-RAM mapping would need a conflict-free
  placement, which this design does not provide. Synthesis of the full-size
  ping-pong buffer, of `bn_res`, and of the whole top therefore takes a long
  time in Yosys.
- **Stages run strictly one after another,** and DMA loads are not overlapped
  with computation.
- **Not built:**
  - the regular linear operation;
  - LayerNorm, embedding, activations and softmax;
  - the off-chip memories, which are replaced by a behavioural AXI model in
    the testbenches.
