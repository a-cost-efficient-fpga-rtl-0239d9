# Neural-ODE tiny Transformer: feature-extraction core in SystemVerilog

This is the RTL of an image-recognition accelerator for a very small hybrid
CNN/Transformer network. Two ideas keep the network small enough for all of
its parameters to stay in on-chip RAM:

* **Iterated blocks instead of stacked blocks.** A ResNet stacks many residual
  blocks `z <- z + f_i(z)`, each with its own weights. Read as a differential
  equation, one residual block is a single forward-Euler step. This network
  keeps one block `f(z, t)` and runs it `C` times with the same weights:
  `z <- z + h*f(z, t_j)`, where `h = 1/C` and `t_j = j*h`. The weight count no
  longer grows with depth. `C` is a run-time register, 10 by default.
* **Attention only where the map is small.** The last iterated block replaces
  convolution with multi-head self-attention (MHSA) on the 6 x 6 map. It uses
  a relative position encoding and a ReLU in place of the softmax.

On top of that, the down-sampling blocks and the attention block use
*learnable look-up-table* (LLT) quantization:
* Weights are signed 8-bit (or 4-bit) integers.
* Every activation that enters one of their convolutions is turned into an
  8-bit (or 4-bit) code by a trained look-up table.

The design follows "A Cost-Efficient FPGA Implementation of Tiny Transformer
Model using Neural ODE" (Okubo, Sugiura, Matsutani). It is an independent RTL
rendering of that architecture, not the authors' code. Where the publication
is silent or contradicts itself, the choices made here are listed in
[Departures and open points](#departures-and-open-points).

## What the core computes

A host CPU runs the network's stem, which turns a 96 x 96 RGB image into a
64 x 24 x 24 feature map. It also runs the classifier head. The core runs
everything in between:

| Stage     | Input          | Output         | Iterated | Arithmetic                      |
|-----------|----------------|----------------|----------|---------------------------------|
| ODEBlock1 | 64 x 24 x 24   | 64 x 24 x 24   | C times  | fixed point                     |
| DSBlock1  | 64 x 24 x 24   | 128 x 12 x 12  | once     | LLT-quantized                   |
| ODEBlock2 | 128 x 12 x 12  | 128 x 12 x 12  | C times  | fixed point                     |
| DSBlock2  | 128 x 12 x 12  | 256 x 6 x 6    | once     | LLT-quantized                   |
| MHSABlock | 256 x 6 x 6    | 256 x 6 x 6    | C times  | LLT-quantized convolutions      |

**Number formats** (package `tt_pkg`):

* Activations are signed 20-bit Q10.10 (10 fractional bits). All arithmetic
  saturates to this range.
* Fixed-point parameters (ODEBlock weights, BatchNorm, positional encodings,
  LayerNorm) are signed 16-bit Q4.12.
* Quantized weights are signed `NBITS`-bit integers. Activation codes are
  unsigned `NBITS`-bit integers.
* BatchNorm and LayerNorm words are `{gamma[31:16], beta[15:0]}`, both Q4.12.
  They are applied as `y = (x*gamma >>> 12) + (beta >>> 2)`.
* The Euler update is `z + (h*f >>> 10)`, with `h = 1024/C` in Q10.10.

## The blocks

### ODEBlock (`odeblock`)

One Euler step computes

```
f(z,t) = BN2( DSC2( [ ReLU(BN1( DSC1([z, t]) )), t ] ) )
z      = z + h * f(z,t)
```

`[x, t]` appends one channel ("add time") that holds `t` inside the image and
0 in the zero-padding ring. Each DSC (depth-wise separable convolution) is a
depth-wise 3x3 on Ch+1 channels, then a point-wise 1x1 from Ch+1 to Ch.

The block works in this order:

1. Copy its input into a private state buffer `z`.
2. For each of the C iterations, run four layer passes:
   * DW1 into a scratch buffer.
   * PW1 + BN1 + ReLU into a second buffer.
   * DW2 into the scratch buffer.
   * PW2 + BN2. Its results go straight into the Euler update, which is
     written back into `z` in place.
3. Copy `z` out.

With `C = 0` the block copies its input through unchanged.

### DSBlock (`dsblock`)

```
main     = BN_b( Conv3x3_s1( ReLU( BN_a( Conv3x3_s2(x) ) ) ) )
shortcut = ReLU( BN_s( Conv3x3_s2(x) ) )
y        = main + shortcut
```

The block runs three layer passes: shortcut, then first main convolution,
then second main convolution. The last pass adds the stored shortcut as each
result leaves the engine, and writes the sum to the next buffer. Every
convolution quantizes its input with its own I-LUT.

### MHSABlock (`mhsablock`, `mhsa_core`)

The MHSABlock is iterated and Euler-updated like an ODEBlock (DM = 64,
N = 36 positions):

```
x = BN( Conv1x1([z, t]) )                 257 -> 64 channels
q, k, v = Wq x, Wk x, Wv x                quantized 1x1 convolutions, 64 -> 64
m = MHSA(q, k, v)
f = ReLU( Conv1x1([m, t]) )               65 -> 256 channels
z = z + h * f
```

Inside `mhsa_core`, each of the `HEADS` heads (D_h = DM/HEADS channels)
computes:

* `logit(i,j) = q_i . (k_j + R_h[row(j)] + R_w[col(j)])`. This is the
  content-content plus content-position term. The position encoding is kept
  as one height table and one width table, and the two are added on the fly.
* `a(i,j) = ReLU(logit / sqrt(D_h))`. The ReLU takes the place of the
  softmax, so no exponent or division per row is needed.
* `o_i = sum_j a(i,j) v_j`.

LayerNorm then runs over all DM x N outputs together, with its own gamma and
beta for every value. Its arithmetic:

* `mean = sum/N`.
* `var = sumsq/N - mean^2`, floored at 1 LSB².
* `inv_std = 2^26 / isqrt(var)`.
* `y = BN(((x - mean)*inv_std) >>> 16)`.

The core uses one multiply-accumulate per cycle:

* For each head and query it first builds the attention row (N*D_h cycles).
* It then forms the D_h outputs (N*D_h cycles).
* Outputs are written while their sum and sum of squares accumulate.
* A final pass normalises the buffer in place.

### The layer engine (`conv_engine`)

Every convolution in the core runs on a `conv_engine`, configured per layer
by a `conv_cfg_t` struct. It handles:

* kernel 1 or 3, stride 1 or 2;
* normal or depth-wise mode;
* an optional time channel;
* BatchNorm and ReLU on or off;
* fixed-point or quantized arithmetic (a build parameter).

**Parallel lanes.** `LANES` output channels are computed in parallel. Each
cycle the engine reads one input value and one weight row, which holds one
weight per lane, and performs LANES multiply-accumulates.

**Loop order, outer to inner.** Output-channel group, output row, output
column, input channel, kernel row, kernel column.

**Output drain.** When a pixel's taps are finished, the LANES accumulators are
copied into a shadow bank. The shadow bank drains one result per cycle, with
BatchNorm, ReLU and the quantized rescale applied on the way out. Meanwhile
the next pixel accumulates. The engine stalls only when a drain is still
running as the next pixel finishes, which happens only for very short
pixels, such as 1x1 layers with fewer input channels than lanes.

**Depth-wise layers** use lane 0 only.

**Weight layout.** The weight memory of a block is a `lane_ram`: LANES
weights per row. A layer whose rows start at `w_base` stores:

* normal layer: row = `w_base + (group*Cin_eff + ic)*k*k + tap`, lane =
  `oc % LANES`, where group = `oc / LANES` and `Cin_eff` includes the time
  channel;
* depth-wise layer: row = `w_base + (c / LANES)*k*k + tap`, lane =
  `c % LANES`.

**Quantized path** (`llt_quant`):

1. Index: `idx = round(a * 2^n*K / s_a)`, clipped to `[0, 2^n*K - 1]`, with
   K = 9. The host supplies `sa_inv = 2^n*K/s_a` in Q16.16, so the index
   needs only a multiply: `idx = (a*sa_inv + 2^25) >>> 26`.
2. Code: `code = I_LUT[idx]`.
3. Rescale: the accumulated `sum(code*w)` becomes Q10.10 through
   `acc*oscale >>> 16`, where `oscale = s_a*s_w*2^26 / 2^(2n)`.

The fixed-point path shifts the accumulator right by 12.

### Memories (`lane_ram`)

Every buffer is a `lane_ram`: a word- or row-wide array. It writes one lane
per cycle and reads a whole row combinationally. The combinational read lets
the engine run one tap per cycle with no pipeline bookkeeping. On an FPGA
the large buffers would map to block RAM with a registered read, at the cost
of one pipeline stage in the engine.

Between blocks there are four buffers:

* an input buffer (64x24x24 words);
* two ping-pong buffers, A (64x24x24) and B (128x12x12);
* an output buffer (256x6x6).

Data moves input → A → B → A → B → output.

## Host interface (`tt_top`, `ctrl_regs`, `axi_dma`)

The core has two ports:

* a 32-bit AXI4-Lite slave for its registers;
* a 128-bit AXI4 master for DRAM.

| Offset | Register | Meaning                                                      |
|--------|----------|--------------------------------------------------------------|
| 0x00   | CTRL     | write bit 0 = 1 to start (ignored while busy)                |
| 0x04   | STATUS   | bit 0 busy, bit 1 done (sticky, cleared by the next start)   |
| 0x08   | MODE     | 0 = parameter load, 1 = inference                            |
| 0x0C   | ITERS    | C, iterations of every iterated block (reset value 10)       |
| 0x10   | SRC      | DRAM byte address to read (16-byte aligned)                  |
| 0x14   | DST      | load mode: parameter word address of the first word         |
| 0x18   | LEN      | load mode: number of 32-bit words                            |
| 0x1C   | OUT      | inference: DRAM byte address of the output map               |
| 0x20   | CYCLES   | clock cycles taken by the last operation                     |

`irq_done` pulses when an operation ends.

DRAM data are 32-bit words, four per 128-bit beat, word 0 in bits 31:0.
The master issues INCR bursts of at most 16 beats that never cross a 4 KB
boundary, with one burst outstanding per direction.

**Load mode** copies `LEN` words from `SRC` to consecutive parameter
addresses starting at `DST`. A parameter address is:

| Bits    | Field                                                              |
|---------|--------------------------------------------------------------------|
| [28:26] | block: 0 ODEBlock1, 1 DSBlock1, 2 ODEBlock2, 3 DSBlock2, 4 MHSABlock |
| [25:23] | memory inside the block (table below)                              |
| [22:0]  | word inside that memory                                            |

| Memory | ODEBlock                         | DSBlock                              | MHSABlock                                   |
|--------|----------------------------------|--------------------------------------|---------------------------------------------|
| 0      | weights, rows DW1, PW1, DW2, PW2 | weights, rows conv_a, conv_b, shortcut | weights, rows conv1, Wq, Wk, Wv, conv2     |
| 1      | BN1 then BN2 (Ch words each)     | BN_a, BN_b, BN_s (2Cin words each)   | BN (DM words)                               |
| 2      | –                                | three I-LUTs of 2^n*9 entries        | five I-LUTs, same layer order               |
| 3      | –                                | words 0..2 `sa_inv`, 3..5 `oscale`   | words 0..4 `sa_inv`, 5..9 `oscale`          |
| 4 / 5  | –                                | –                                    | R_h (H x DM) / R_w (W x DM), row-major      |
| 6      | –                                | –                                    | LayerNorm words, one per output value       |

**Weight word address.** A weight sits at `row*LANES + lane`, using the
layouts of the layer engine. Each layer's rows start where the previous
layer's end:

* ODEBlock:
  * a depth-wise layer has `ceil((Ch+1)/LANES)*9` rows;
  * a point-wise layer has `ceil(Ch/LANES)*(Ch+1)` rows.
* DSBlock: each layer has `ceil(2Cin/LANES) * Cin_layer * 9` rows.
* MHSABlock:
  * conv1 has `ceil(DM/LANES)*(Ch+1)` rows;
  * Wq, Wk and Wv have `ceil(DM/LANES)*DM` rows each;
  * conv2 has `ceil(Ch/LANES)*(DM+1)` rows.

Parameters stay loaded across inferences.

**Inference mode** runs these steps:

1. Read the 64x24x24 input map from `SRC`. Maps are channel-major, one Q10.10
   value in the low 20 bits of each word.
2. Run the five blocks in turn with the current `ITERS`.
3. Write the 256x6x6 output map to `OUT`, sign-extended to 32 bits.

## Timing

Cycle counts are dominated by the layer loops: one tap per cycle for each
group of LANES output channels.

* ODEBlock: about `H*W*(2*Ch + C*(18*(Ch+1) + 2*(Ch+1)*ceil(Ch/LANES)))`.
* DSBlock: about `ceil(2Cin/LANES) * (H/2)*(W/2) * 36*Cin`.
* MHSABlock: about `C*(N*(Ch+1)*ceil(DM/LANES) + 3*N*DM*ceil(DM/LANES) +
  2*N*N*DM + DM*N + N*(DM+1)*ceil(Ch/LANES)) + 2*Ch*N`.

At the default size with C = 10, one inference takes 20.93 million cycles,
counted by the CYCLES register. That is about 105 ms at 200 MHz. The publication reports 43 ms for
its own implementation. Most of the difference comes from two simplifications
here: depth-wise layers run on a single lane, and attention uses a single
multiplier. Loading all parameters takes about 1.6 million words through the
128-bit port.

## Departures and open points

Points where the publication is ambiguous, and the reading taken here:

* **DSBlock shortcut kernel.** The block diagram and the parallelism table
  show a 3x3 stride-2 convolution. The layer table and the stated buffer
  sizes fit a 1x1 convolution. The RTL follows the diagram; `SC_K = 1`
  builds the other reading.
* **DSBlock activations.** The ReLU sits on the shortcut before the adder,
  and there is no ReLU after the sum, as the block diagram draws it.
* **MHSABlock.** No ReLU follows its first BatchNorm, and its last stage is
  1x1 convolution then ReLU, following the layer table and the block
  diagram. Another overview figure draws a ReLU after the BatchNorm and a
  BatchNorm at the end.
* **Iterated MHSABlock.** The block is iterated with an Euler update,
  following the loop drawn around it and its "add time" layers.
* **Number of heads.** Not given; `HEADS = 4` is assumed.
* **Time origin.** `t_0 = 0`.
* **LayerNorm epsilon.** Replaced by a floor of 1 LSB² on the variance.

Implementation choices of this design:

* the register map, parameter address map, DRAM word format and burst
  policy;
* combinational-read buffers;
* BatchNorm/ReLU fused into the layer engine's output drain, where the
  original design lists BNReLU as a layer of its own;
* one engine per block, with one `LANES` value for all its layers, where the
  original design sets the parallelism per layer (2 to 64);
* single-lane depth-wise layers and a single-MAC attention core;
* no overlap of DRAM transfers with computation.

The design quantizes exactly the DSBlocks and the MHSABlock, the
configuration the original hardware implements. A 4-bit model runs on a
build with `NBITS = 4`. It also runs on the default 8-bit build:
* its weights and codes fit the 8-bit fields;
* the host gives `sa_inv = 2^4*9/s_a`;
* I-LUT entries 144 and above repeat entry 143, which reproduces the 4-bit
  clip.

Only the `NBITS = 4` build is simulated.

Not included:

* the host-side stem and classifier;
* DRAM;
* the system interconnect;
* the training of the I-LUTs and scales. The host must provide them, with
  `sa_inv` and `oscale` precomputed as described above.

## Files

`rtl/`:

| File               | Content                                                   |
|--------------------|-----------------------------------------------------------|
| `tt_pkg.sv`        | formats, `conv_cfg_t`, saturation, BatchNorm and Euler helpers |
| `lane_ram.sv`      | banked memory                                             |
| `llt_quant.sv`     | LLT activation quantizer                                  |
| `conv_engine.sv`   | layer engine                                              |
| `odeblock.sv`      | ODEBlock                                                  |
| `dsblock.sv`       | DSBlock                                                   |
| `mhsa_core.sv`     | attention core                                            |
| `mhsablock.sv`     | MHSABlock                                                 |
| `ctrl_regs.sv`     | AXI-Lite registers                                        |
| `axi_dma.sv`       | AXI master                                                |
| `tt_top.sv`        | top level                                                 |

`tb/`:

* One self-checking testbench per module, `tb_<module>.sv`.
* `tt_ref_pkg.sv`: plain loop reference models (convolution layer,
  quantizer, attention with LayerNorm).
* `axi_mem_model.sv`: a DRAM model that checks AXI bursts.
* `tt_top_env.sv`: the end-to-end environment.
* `tb_tt_top.sv`: the reduced end-to-end test. It uses 4 channels, an 8x8
  map, 2 heads and 4-bit LLT, and runs two inferences with C = 2 and C = 1.
* `tb_tt_top_full.sv`: the end-to-end test at the default size, with one
  inference at C = 10. It takes about a minute.
* `tb_tt_top_full_4bit.sv`: the same test on a build with `NBITS = 4`.

The end-to-end tests do these things:

* generate random parameters;
* load them through the load mode;
* compare every output word, and the intermediate maps left in the
  ping-pong buffers, with the reference models;
* count that every mechanism ran. The counted mechanisms are:
  * parameter writes into each block;
  * exact numbers of Euler updates;
  * quantized MACs;
  * shortcut additions;
  * attention and LayerNorm passes;
  * interrupts;
  * 16-beat bursts and bursts split at 4 KB boundaries.

Each testbench prints `TB_RESULT checks=N failures=M`.

To run one with Verilator (here the top-level one):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/tt_pkg.sv tb/tt_ref_pkg.sv tb/tb_tt_top.sv --top-module tb_tt_top -o sim
./obj_dir/sim
```
