# ME-ViT in SystemVerilog: design notes

This is a register-transfer implementation of ME-ViT, a single-load,
memory-efficient FPGA accelerator for Vision Transformers. It has three parts:

- a Memory-Efficient Processing Element (ME-PE) that runs a whole ViT encoder
  on one packed-DSP systolic array;
- a scheduler that shares the DRAM streams;
- a multi-PE top level with five ME-PEs, as the paper places them on an
  Alveo U200.

All parameter defaults are the paper's ViT-B numbers: P_SYS = 32, D = 768,
N + 1 = 257 tokens, 12 heads, and 5 PEs. The one exception is the MLP hidden
size, which the paper does not give; it is 3072 (4·D).

## 1. Structure

| Module | Role |
|---|---|
| `mevit_pkg` | command type, int8 saturation, score clamp |
| `dsp_pack_mul` | one DSP: A·B and A·C from one 18×27 multiply with (B<<18)+C packing |
| `systolic_array` | P×P packed DSPs giving a P×2P output block, accumulated in place (output stationary) |
| `buffer_ram` | byte-lane RAM used for every on-chip buffer (P or 2P lanes) |
| `ln_stats` | per-row sum and square sum, then mean and 1/sqrt(var) in fixed point |
| `layernorm_unit` | 4-stage pipeline: (x − mean)·rstd·γ + β |
| `fp_sum` | float accumulation of 2^x (the first pass of Pseudo-Softmax) |
| `fp_recip` | reciprocal of the sum's mantissa (restoring division) |
| `pseudo_softmax` | the shift datapath: {1, recip} >> (exp_sum + 1 − (x + 127)), upper 8 bits |
| `me_pe` | buffers, array, per-row LayerNorm and Softmax units, mode sequencer |
| `pe_scheduler` | read grant round-robin in bursts, write grant round-robin per beat |
| `me_vit` | NUM_PE ME-PEs plus the scheduler (top) |

The DRAM, its controller and the host are outside the design. The top exposes
two memory channels, one read and one write, tagged with a PE number, plus a
per-PE command handshake.

## 2. Number formats (own choices)

The paper implies 8-bit operands: byte-sized buffers and two 16-bit products
per DSP. It gives no scaling, so this design chooses one:

- activations are int8 with 4 fractional bits;
- weights are int8 with 7 fractional bits;
- products are summed in 32 bits, then shifted and saturated back to int8:
  - by 7 after a matrix product;
  - by 11 for scores, which also absorbs 1/sqrt(DH);
  - by 8 after softmax·V.
- Scores are clamped to [−64, 63].
- The softmax output is unsigned Q0.8.

The array's left operand is 9 bits wide so that it can carry either an int8
activation or a Q0.8 probability. LayerNorm works as follows:

- mean in Q8;
- 1/sqrt(var + ε) in Q12, saturating at 16 bits;
- γ with 5 fractional bits;
- β in the activation format.

## 3. The ME-PE

Buffers and their roles are listed in the opening comment of `me_pe.sv`. The
buffer set and sizes follow the paper:

- three BRAM buffers:
  - Weight: D·D bytes;
  - Feature and Layer: (N+1)·D bytes each, rounded up to whole row blocks of P.
- LUTRAM-sized buffers:
  - Q: P·DH;
  - K and V: D·DH each;
  - Result: P·2P words of 32 bits, kept as registers;
  - two S buffers: P·D each.

Commands:

- **LOAD_F, LOAD_L** fill the Feature and Layer buffers with the patch rows
  and the position embedding. The class token enters as a zero patch row, so
  its embedding is just its position row.
- **LP** runs two steps.
  - Feature × Weight plus the residual from the Layer buffer goes into S1.
    Row sums for LayerNorm are taken on the fly.
  - Per row block, LayerNorm writes into the Layer buffer, and the
    un-normalised sums go back to the Feature buffer.
  - The same command serves the patch embedding and the MSA output
    projection.
- **MSA** works per head.
  - First V = L·W_V and K = L·W_K are computed.
  - Then, per row block: Q, the scores Q·Kᵀ, the Pseudo-Softmax passes (float
    sum, reciprocal, shift), and Z = P·V into the head's columns of the
    Feature buffer.
  - The residual moves to the free part of the Weight buffer at the first
    head, and to the Layer buffer at the end.
- **MLP** uses the partial-sum method.
  - For each 2P-wide hidden column block: M = ReLU(L·W_H + B_H), then
    S += M·W_O.
  - At the end come the residual add and LayerNorm.
- **STORE** streams the Layer buffer out.

A layer is the command sequence MSA, LP, MLP. Each parameter byte is read
exactly once, and nothing else is read or written back.

The DRAM beat is 2·P bytes. The stream order per command is given in the
`me_pe.sv` header.

## 4. Pseudo-Softmax and LayerNorm

**Pseudo-Softmax** is computed in three passes per score row:

1. `fp_sum` adds 2^x as float32 values with mantissa 1 and exponent x. The
   smaller addend is truncated.
2. `fp_recip` produces 1/mantissa.
3. `pseudo_softmax` shifts {1, recip[22:0]} right by
   sum[30:23] + 1 − (x + 127) and keeps bits [22:15].

Two edge cases are this design's choice. A shift below zero saturates to all
ones. Padded key columns, which exist when N+1 is not a multiple of 2P, are
left out of the sum and get probability 0.

**LayerNorm** also uses two passes.

- The first pass accumulates Σx and Σx².
- Then the variance is computed as E[x²] − mean² + ε.
- A 16-step square root and a 21-step divide give 1/sqrt(var). `ln_stats`
  raises done about 40 cycles after start.
- The second pass streams each row through `layernorm_unit`, one element per
  cycle with a 4-cycle latency.

## 5. Multi-PE and scheduler

`me_vit` instantiates NUM_PE ME-PEs. Each PE works on its own image.

- **Reads:** each PE raises `ld_need` while it waits for parameters. The read
  channel is granted round-robin and held for at most BURST beats. After a
  full burst the channel pauses for one cycle so that the grant can move.
- **Writes:** granted round-robin per beat.

The memory side names the PE whose stream it must serve, for instance one DMA
queue per PE. The SLR placement is physical only and is not modelled.

## 6. Differences from the paper

1. **No overlap.** The paper overlaps weight loads, block multiplies, Softmax
   and LayerNorm, and ping-pongs the two S buffers in MLP mode. Here every step
   runs after the previous one ends.
   - The array is busy for exactly NB·CB·D cycles in LP mode; the test
     checks this.
   - Loads, LayerNorm and Softmax add serial time on top.
   - The paper's FPS figures are therefore not reached. S2 holds the
     broadcast B_O instead of acting as a second staging buffer.
2. **ReLU replaces GeLU** in the MLP.
3. **Operands are broadcast** to a whole row or column of the array in the
   same cycle. The cell-to-cell wavefront of a true systolic array is not
   reproduced. The products and sums are the same.
4. **Own choices**, which the paper does not describe:
   - all number formats and shifts (section 2);
   - the square-root and divide methods;
   - the float truncation;
   - the scheduler policy;
   - the DRAM stream layout;
   - the MLP epilogue that closes a layer.
5. **One unified PE runs all modes.** The paper synthesised each mode
   separately.
6. **Token count and model size are elaboration parameters.**
   - ViT-B runs at the defaults.
   - DeiT-B needs N_TOK = 197.
   - DeiT-S needs D = 384, H = 6, DFF = 1536, N_TOK = 197.
   - DeiT-T needs D = 192, H = 3, DFF = 768, N_TOK = 197.

   All of these elaborate without errors. The rough work per image is
   23.2 GMAC for ViT-B, 17.6 for DeiT-B, 4.6 for DeiT-S and 1.2 for DeiT-T.
   These figures are worked out from the model sizes, not measured.

## 7. Verification

Every module has a self-checking testbench. Each prints a final
`TB_RESULT checks=… failures=…` line and has a watchdog. Run one with plain
Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_me_pe \
    rtl/mevit_pkg.sv rtl/*.sv tb/tb_me_pe.sv
./obj_dir/Vtb_me_pe
```

| Testbench | Size | Result |
|---|---|---|
| `tb_dsp_pack_mul` | 1000 random and corner operand sets | 1012 checks, 0 failures |
| `tb_systolic_array` | P = 4, random blocks, back-to-back tiles | 396 / 0 |
| `tb_buffer_ram` | random lane-masked writes and reads | 800 / 0 |
| `tb_ln_stats` | 24 columns, random rows against a real-valued model | 120 / 0 |
| `tb_layernorm_unit` | random rows, latency checked | 303 / 0 |
| `tb_fp_sum` | random rows against exact float arithmetic | 120 / 0 |
| `tb_fp_recip` | random mantissas, latency checked | 400 / 0 |
| `tb_pseudo_softmax` | random scores and sums | 1000 / 0 |
| `tb_me_pe` | P = 2, D = 16, 7 tokens, 2 heads, DFF = 32: one full encoder layer | 168 / 0 |
| `tb_pe_scheduler` | 3 PEs, random readiness, burst 4 | 503 / 0 |
| `tb_me_vit` | 2 PEs of the `tb_me_pe` size running full layers concurrently | 334 / 0 |
| `tb_me_vit_full` | default top (5 PEs, P = 32, D = 768, 257 tokens, 12 heads), one full encoder layer on PE 0 | 221224 / 0 |

**Single-PE test.** `tb_me_pe` compares every output word with a bit-exact
reference model of the arithmetic above. The read stream has random bubbles
and the write stream has random back-pressure. The test also checks four
things:

- every sequencer step of every mode ran;
- the whole parameter stream was consumed exactly once;
- the array-cycle count in LP mode is correct;
- ReLU clipping, saturation and key masking all occurred.

**Top-level test.** `tb_me_vit` additionally requires each of the following
to happen at least once:

- a read-grant change between PEs;
- cycles in which both PEs compute;
- cycles in which both PEs want data.

**Fault tests.** Each testbench was also run against a deliberately broken
copy of its block, and every copy was caught. The faults were:

- a missing packing correction;
- no accumulator clear;
- the lane mask ignored;
- a wrong mean scale;
- no β;
- no exponent carry;
- a reciprocal off by one bit;
- the "+1" of the softmax shift dropped;
- no ReLU;
- no burst limit;
- crossed valid wires.

**Full-size test.** `tb_me_vit_full` builds the top with every parameter at
its default: 5 PEs, P = 32, D = 768, 257 tokens, 12 heads and DFF = 3072. It
takes PE 0 through one complete encoder layer, with the same commands, checks
and reference model as `tb_me_pe`:

- LOAD_F, LOAD_L;
- LP, MSA, LP, MLP;
- STORE.

All 288×768 output bytes match. The LP array time is exactly
9·12·768 = 82,944 cycles. The run also produced plenty of ReLU clipping and
saturation, and 63 masked key columns per score row. The simulation covers
about 2.6 million clock cycles. It takes about 1.5 minutes after a build of a
few minutes with plain `verilator --binary --timing`.

**Scope of the simulations.** Concurrent operation of several PEs behind the
scheduler is simulated at the reduced size of `tb_me_vit`. Generic synthesis
at full size did not finish within ten minutes.

## 8. Not implemented

- The DRAM, its controller and the host software that issues the command
  sequence. The testbenches play these roles.
- The paper's overlapped scheduling and S-buffer ping-pong (section 6).
- GeLU.
- SLR floor-planning.
