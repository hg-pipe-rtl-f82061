# A hybrid-grained streaming pipeline for a 3-bit Vision Transformer

This is SystemVerilog RTL for a Vision Transformer (ViT) encoder that has no shared compute engine at all.
Every operator of every layer has its own small piece of hardware:

- LayerNorm
- the Q/K/V projections
- Q x K^T
- Softmax
- R x V
- the output projection
- the residual adds
- the two MLP matrices
- GeLU

The operators are chained into one long pipeline of 12 attention blocks and 12 MLP blocks. Embedded tokens stream in a few bits per cycle. The encoder output streams out the same way. Once the weights are on chip, a new image can enter every *II* cycles, whatever the depth of the network.

The default parameters describe Deit-tiny:

- 196 tokens of 192 channels
- 3 heads of 64
- MLP width 768
- 12 layers
- 3-bit weights and 3-bit activations (A3W3)

The per-operator parallelism is the one published for the HG-PIPE accelerator on a Versal VCK190. At those settings, the slowest operator (Softmax) needs 57,624 cycles per image. At 425 MHz this is roughly 7,400 images per second.

Two ideas make such a design practical, and most of this document is about them:

1. **Hybrid granularity.** Most operators work *fine-grained*: they start as soon as a handful of tokens have arrived. Attention cannot: Q x K^T needs *all* of K before the first score row is complete, and R x V needs all of V. So the pipeline is fine-grained everywhere except at those two points. At those points it is *coarse-grained*: whole tensors are buffered, while everything that must wait for them waits in deep FIFOs.
2. **Tables instead of arithmetic.** At 3 bits every non-linear function (GeLU, exp, 1/x, 1/sqrt(x), requantisation) becomes a 64-entry lookup table. The table index is a power-of-two step, `(x - alpha) >> s`, so finding the entry costs a subtractor and a shift, not a multiplier.

## 1. Streams and tiles

Every link in the design is a valid/ready stream. A beat moves when `valid && ready` at a rising clock edge.

- A producer that has raised `valid` keeps `valid` high and its data stable until the beat is taken. `stream_fifo` asserts this rule.
- All resets are synchronous and active-low (`rst_n`).

A tensor of T tokens x C channels moves as **tiles**. A beat carries TP tokens (a *token group*) and some channels of those tokens. Token groups arrive in order, and channels arrive in ascending order within a group.

Element (t, c) of a beat that holds TP tokens x N channels sits at bits `[(t*N + c)*W +: W]`. Between blocks a beat is TP x 1 activations: with TP = 2 that is 6 bits.

| symbol | meaning | Deit-tiny value |
|---|---|---|
| T, TP, TT | tokens, tokens per beat, token groups T/TP | 196, 2, 98 |
| C, H, DH, HID | channels, heads, head width, MLP width | 192, 3, 64, 768 |
| CIP, COP | input / output channels handled per cycle in a matrix unit | per unit, table below |
| CIT, COT | CI/CIP, CO/COP | |

## 2. The matrix units

All six kinds of matrix product use the same output-stationary structure. There are two variants.

`stmm` is used when the weights are static. It handles Q/K/V generation, the output projection, MatMul1 and MatMul2.

1. **Line buffer.** All CI input channels of one token group are collected, IN_CP channels per input beat. The buffer has two banks: one fills while the other is being computed on.
2. **MAC array.** For each output tile `cot` and each input tile `cit`, one cycle does TP x COP accumulators x CIP products. After CIT cycles the output tile (TP tokens x COP channels) is registered and the next `cot` begins.

One token group takes CIT x COT cycles, so one image takes **II = TT x CIT x COT** cycles. A stage with II below the pipeline's maximum simply idles part of the time, because its input and output handshakes stall it.

`dymm` is used when the "weights" are another tensor of the same image: K for Q x K^T, and V for R x V. It has the same two stages. The difference is that each MAC step reads a COP x CIP tile of the dynamic tensor from a `deep_buffer` in the same cycle. The MAC stage also runs only while the buffer reports `buf_full`. After the last tile of the last token group, it pulses `buf_release` to free the buffer for the next image.

| unit | CI / CIP | CO / COP | II (cycles) | output |
|---|---|---|---|---|
| Q, K, V generation (per head, 3 each) | 192 / 6 | 64 / 4 | 50,176 | 3-bit via ReQuant table |
| Q x K^T (per head) | 64 / 4 | 196 / 7 | 43,904 | raw scores to Softmax |
| R x V (per head) | 196 / 7 | 64 / 4 | 43,904 | 3-bit via ReQuant table |
| output projection | 192 / 12 | 192 / 6 | 50,176 | raw to residual add |
| MatMul1 | 192 / 12 | 768 / 24 | 50,176 | raw to GeLU |
| MatMul2 | 768 / 24 | 192 / 12 | 50,176 | raw to residual add |

A unit feeds a raw accumulator (not a requantised value) onward whenever the next operator is itself a table: GeLU, Softmax or the residual add. That way the requantisation is folded into the next table rather than done twice.

### Weight loading

The weights are meant to be frozen in on-chip ROMs, but no trained weights ship with the design. Each weight memory therefore has a write port that is used once before inference.

A weight word holds one COP x CIP tile. Word `cot*CIT + cit` holds `w[cot*COP+co][cit*CIP+ci]` at bits `[(co*CIP+ci)*3 +: 3]`.

At the top level, these signals pick the memory:

- `wl_layer`: the layer.
- `wl_mlp`: 0 for the attention block, 1 for the MLP block.
- `wl_unit`: the matrix within the block.
  - Attention block: `3h+0/1/2` are Q/K/V of head h, and `3H` is the projection.
  - MLP block: 0 is MatMul1 and 1 is MatMul2.

## 3. The attention block: where the pipeline becomes coarse

```
 in -+--> residual FIFO (one whole image) ---------------------------+
     |                                                               v
     +--> LayerNorm -+-> per head h:                            residual add -> out
                     |   Q gen -> Q FIFO ----------------> QK --> Softmax --> RV --> head FIFO
                     |   K gen -> K FIFO -> K buffer ------^                   ^
                     |   V gen -> V FIFO -> V buffer (read transposed) -------+
                     +-------------------------------------- head concat -> projection -^
```

The three generators of every head (`mha_block`) consume the same LayerNorm output at the same rate, and they emit Q, K and V of the same token group at the same time. But Q x K^T can do nothing useful until K is complete. The sequence for one image is:

1. K tiles flow into the **K buffer** (`deep_buffer`). It holds the whole 196 x 64 tensor and then raises `full`.
2. Meanwhile, Q tiles pile up in the **Q FIFO**, and the residual (the block's input) piles up in the **residual FIFO**. Both FIFOs must hold a whole image, or the LayerNorm would stall before K is complete, and K would never finish: a deadlock. Their depths are derived from this argument: 1,568 Q tiles and 18,880 residual beats. They are not the 512 that is sometimes quoted as a typical deep-FIFO depth.
3. As soon as K is full, Q x K^T drains the Q FIFO. Its scores go through Softmax into R x V, which reads the **V buffer** *transposed*. V is written token by token, but R x V needs it channel by channel. The transpose is just a different read address of the same array (`TRANSPOSE = 1`).
4. After the last token group, both dynamic units release their buffers. While they were busy, the *next* image's K and V were already being produced. They waited in the K and V FIFOs, and they now move into the freed buffers.

The head outputs are concatenated (head 0's 64 channels first, then head 1, then head 2). The concatenated result goes through the output projection, and is added to the residual.

Each K and V buffer is a single buffer, not a ping-pong pair. The FIFOs in front of it absorb the next image. Only one residual tensor is stored per block.

## 4. The MLP block: fine-grained throughout

```
 in -+--> residual FIFO (8 token groups) -----------------------------------+
     +--> LayerNorm -> MatMul1 -> GeLU (fused with ReQuant) -> MatMul2 -> residual add -> out
```

Every stage starts on the first complete token group. The residual only has to cover the few token groups that are in flight. Those are in the LayerNorm row buffer and in both double-buffered line buffers, so 8 token groups (1,536 beats) are enough.

## 5. Three-pass operators

LayerNorm and Softmax need a statistic of a whole row before they can emit its first element. Each of them holds the current token group in a double-buffered row buffer and reads it three times. This makes their II three times the row length: 3 x 192 x 98 = 56,448 for LayerNorm, and 3 x 196 x 98 = **57,624 for Softmax**. The Softmax figure is the pipeline's II.

**LayerNorm** (`layernorm`):

- Pass 0 sums S = sum x.
- Pass 1 forms d = C·x − S, which is C times the deviation. This avoids a divider. The same pass accumulates V = sum d², which equals C³ times the variance.
- Pass 2 emits `requant(d x rsqrt_lut(V))`. The Rsqrt table's numerator is sqrt(C)·2^F, so the product is the normalised value in fixed point with F fraction bits.

Gamma and beta are assumed to be folded into the following weights and tables.

**Softmax** (`softmax`):

- Pass 0 finds the row maximum m.
- Pass 1 sums e = exp_lut(m − x). The exponent table is indexed by `(m − x) >> s`: the maximum always lands exactly on entry 0 (e = 255), and the rest decay from there.
- Pass 2 re-reads the exponent and multiplies it by the reciprocal of the sum. The probability is quantised as `min((e·r) >> R_SHIFT, 3)`.

The reciprocal table (`recip_lut`) is **segmented**, because 1/x is steep near the low end of its range:

- The range 255 … 196·255 is split at its first eighth.
- Each part has its own 64-entry table and its own power-of-two step.

## 6. Tables

All tables are computed at elaboration time by constant functions in `hg_pkg`, so there are no data files. For a table with 64 entries, start alpha and step 2^s:

- `idx = clamp((x − alpha) >> s, 0, 63)`
- `s` is the smallest shift with 63·2^s ≥ (range of x).
- Entry i samples the target function at the bin centre, `alpha + i·2^s + 2^(s−1)`. The exponent table is the exception: it samples the bin start, so that entry 0 is exactly exp(0).

| table | entries x bits | function |
|---|---|---|
| `requant_lut` | 64 x 3 | clamp(round(x·SCALE), −4, 3) |
| GeLU (in `gelu`) | 64 x 3 | ReQuant(GeLU(x·IN_SCALE)), one fused curve (tanh form of GeLU) |
| `exp_lut` | 64 x 8 | round(255·exp(−d·IN_SCALE)) |
| `recip_lut` | 2 x 64 x 8 | round(NUM / x), saturated to 255 |
| `rsqrt_lut` | 64 x 12 | round(NUM / sqrt(x)), saturated to 4095 |

**The calibration constants are placeholders.** These are the alpha values, shifts and scale factors. A trained, quantised network comes with its own calibrated ranges. They enter as module parameters and do not change the structure.

The GeLU unit takes a MatMul1 tile of 2 x 24 accumulators. It emits that tile as 12 beats of 2 x 2 activations: 4 lookups per cycle and II 37,632.

The residual add computes `requant((residual << 5) + accumulator)`. The shift aligns the 3-bit residual with the accumulator scale.

## 7. The whole pipeline

`hg_pipe` chains the 24 blocks. Each block input has a 16-deep link FIFO. The top has three port groups:

- the input stream of embedded tokens;
- the output stream of encoder tokens;
- the weight load port.

Patch embedding, the classification head and the DMA engines that move tensors to and from external memory are not part of this RTL.

Because each block only sees streams, images overlap freely. While image n is in layer 7, image n+1 can be in layer 3. Image n+2 can already be entering, as far as the deep FIFOs and buffers allow.

In simulation at full size, weight loading takes 73,874 cycles. The first image then leaves about 797,600 cycles after loading ends. The second image follows 60,002 cycles after the first. The output side was randomly stalled 10% of the time, against the 57,624-cycle Softmax bound.

## 8. Files

| file | contents |
|---|---|
| `rtl/hg_pkg.sv` | widths, types, table generator functions |
| `rtl/stream_fifo.sv` | FIFO for links and deep FIFOs |
| `rtl/requant_lut.sv`, `exp_lut.sv`, `recip_lut.sv`, `rsqrt_lut.sv` | tables |
| `rtl/stmm.sv`, `rtl/dymm.sv` | static- and dynamic-weight matrix units |
| `rtl/deep_buffer.sv` | K / V tensor buffer, optional transposed read |
| `rtl/layernorm.sv`, `rtl/softmax.sv`, `rtl/gelu.sv`, `rtl/residual_add.sv` | element-wise and row operators |
| `rtl/mha_block.sv`, `rtl/mlp_block.sv` | the two block types |
| `rtl/hg_pipe.sv` | top level |
| `tb/tb_ref_pkg.sv` | whole-tensor integer reference model of every operator |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_hg_pipe_full.sv` | the top at its default size |

## 9. Verification

Each testbench drives random data. It compares every output beat with the reference model in `tb_ref_pkg`, which computes the same integer arithmetic on whole tensors without tiling. Each testbench ends with a line `TB_RESULT checks=N failures=M`, and has a cycle watchdog.

Where a rate is defined, it is checked:

- the stmm/dymm/softmax cycle counts;
- the image interval of the blocks and of the pipeline, which must lie within −5%/+10% of the slowest stage.

The block and pipeline tests are scaled down to 14 tokens, 24 channels, 2 heads of 12 and MLP width 48, with the full parallelism per unit. At that size LayerNorm is the slowest stage: 504 cycles per image.

`tb_hg_pipe` runs two layers with random input gaps and random output back-pressure. It fails unless each of these was seen at least once:

- input stall
- output stall
- a QK unit waiting with full line buffers for K
- a later image's K waiting in the K FIFO
- the correct number of buffer releases
- two images in flight at once
- both layers busy at once

`tb_hg_pipe_full` runs the top with no parameter overrides: two Deit-tiny-sized images through all 12 layers with random weights. It takes about 2 minutes to build and 5 minutes to run.

To run one test with plain verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/hg_pkg.sv tb/tb_ref_pkg.sv tb/tb_mha_block.sv \
          --top-module tb_mha_block -o sim && ./obj_dir/sim
```

The scaled-down MLP and pipeline tests use weights of full magnitude (only −4 and +3). Without them, the MLP of a 24-channel block barely changes its residual input, and a wrong MatMul2 would go unnoticed.

## 10. Where this design departs from the published accelerator, and what is open

- **Calibration and weights.** The table ranges and scales are this design's defaults, and the weights are loaded through a port rather than being ROM contents. Outputs are bit-exact with the reference model, but the reference model is this design's own integer arithmetic, not a trained network.
- **GeLU parallelism.** The published parallelism table lists the GeLU unit as "192/2 = 98". Its own II (37,632 = 98 x 384) only works out for the 768 MLP channels at 2 per cycle, and that is what is built.
- **FIFO depths.** The deep FIFO depths follow from the deadlock argument in section 3, not from the commonly quoted 512. With 512 entries, the Q and residual FIFOs of a 196-token image would deadlock this design.
- **Softmax output.** The probability is quantised to the 3-bit activation type. LayerNorm's gamma/beta are not applied. The GeLU table samples the tanh approximation.
- **Head concat order and link FIFO depth** are this design's choice.
- **Not built:**
  - patch embedding and the classification head (no structure published);
  - the DMA engines and the host system;
  - 4-bit (A4W4) operation. The activation and weight widths are package constants fixed at 3, and the tables assume it.
  - Deit-small (384 channels, 6 heads, MLP 1536). It is a parameter change, but it has not been simulated.
  - the 4-part split of the network for a smaller FPGA, which would need the weights reloaded between parts.
- **Deit-small** parameters (C=384, H=6, HID=1536) elaborate without errors, but that size has not been simulated. Its published per-unit parallelism is not known, so the Deit-tiny values are kept.
- **Table calibration.** The published design fits each table's range to measured data in an offline loop: it trims repeated clamped entries at both ends until the range is stable. That procedure belongs to the training and quantisation flow, not the hardware, and it is not reproduced. The tables take their ranges as parameters.
- **Multipliers.** The 3-bit x 3-bit products are written as plain `*`. The intent is that they map to a few LUTs each, not to DSP blocks. This RTL does not force that mapping.
- **Memories** are written as plain arrays. How they map to block RAM, LUT RAM or UltraRAM, and the banking of the K/V buffers, is left to synthesis.
