# ADAPTOR-style runtime-adaptive transformer encoder accelerator

This is a SystemVerilog implementation of an FPGA accelerator for transformer
encoder layers. It follows the architecture of ADAPTOR, "A Runtime-Adaptive
Transformer Neural Network Accelerator on FPGAs". The hardware is built once for
maximum sizes. A processor then writes the shape of the model it wants to run into
registers: sequence length, number of heads, embedding width, hidden width and
number of layers. Running a different model does not need a new synthesis.

The design is in `rtl/`. Self-checking testbenches are in `tb/`.

## What it computes

Each encoder layer takes an input `X` (`seq_len x d_model`) and computes:

```
for each head h (d_k = d_model / heads):
    Q_h = X W_Q,h + b_Q,h      K_h = X W_K,h + b_K,h      V_h = X W_V,h + b_V,h
    A_h = softmax_rows(Q_h K_h^T / sqrt(d_k)) V_h
A   = [A_0 | A_1 | ... ]                       (concatenated heads)
L1  = LayerNorm1(X  + A  W_O + b_O)             FFN1, residual add, LN
H   = ReLU(L1 W_1 + b_1)                        FFN2
X'  = LayerNorm2(L1 + H W_2 + b_2)              FFN3, residual add, LN
```

`X'` overwrites `X` and becomes the next layer's input. After the last layer the
result stays in the on-chip buffer, where a read port exposes it.

## Number format

* Activations, weights and biases are signed 16-bit fixed point, Q7.8 (`fx_t`).
  That is 8 integer bits including the sign and 8 fraction bits, covering
  -128.0 to +127.996.
* Dot products are accumulated in 40 bits (`acc_t`). They are brought back to
  Q7.8 by an arithmetic shift right of 8 with saturation (`acc_to_fx`).
* Parameters sit in external memory as IEEE-754 single-precision floats. The
  load unit converts them to Q7.8 in a 3-stage pipeline. The conversion
  truncates toward zero and saturates.
* Every addition of two Q7.8 values saturates.

The original design says only that it is quantized, with a fixed bit width.
The width and the Q7.8 split are choices made here, set in `adaptor_pkg.sv`.

## Synthesis-time parameters (`adaptor_top`)

| Parameter | Default | Meaning |
|---|---|---|
| `SL` | 128 | maximum sequence length (the published synthesis used 64; its validation table also runs 128) |
| `D` | 768 | maximum embedding width `d_model` |
| `H` | 12 | number of attention head instances |
| `DK` | 96 | maximum head width `d_model/heads` (768/8, needed for 8-head models) |
| `HID` | 3072 | maximum FFN hidden width |
| `TSM` | 64 | attention tile size `TS_MHA`: input columns per QKV tile |
| `TSF` | 128 | FFN tile size `TS_FFN` |
| `MAX_OUT` | 8 | outstanding AXI reads of the load unit |

Runtime values must satisfy the following:
* `seq_len <= SL`.
* `d_model <= D`, and `d_model` is a multiple of `TSF`, which also makes it a
  multiple of `TSM`.
* `heads <= H`, `d_model` divisible by `heads`, and `d_model/heads <= DK`.
* `hidden <= HID`, and `hidden` is a multiple of `4*TSF`.
* The layer count is any value of 1 or more.

## Interfaces of `adaptor_top`

* **AXI4-Lite slave** (`s_*`, 8-bit byte addresses, 32-bit data) holds the
  configuration:

  | Addr | Name | Contents |
  |---|---|---|
  | 0x00 | CTRL | write bit0=1: start (ignored while busy). Read: bit0 busy, bit1 done (sticky, cleared by start) |
  | 0x04 | Sequence | sequence length |
  | 0x08 | Heads | number of heads |
  | 0x0C | Layers_enc | number of encoder layers |
  | 0x10 | Layers_dec | decoder layers (stored, not used) |
  | 0x14 | Embeddings | `d_model` |
  | 0x18 | Hidden | FFN hidden width |
  | 0x1C | Out | output size (stored, not used) |
  | 0x20 | IN_ADDR | byte address of `X` in external memory |
  | 0x24 | WT_ADDR | byte address of layer 0's parameters |
  | 0x28 | CYCLES | clock cycles taken by the last run |

  Registers 0x04 to 0x1C are 16 bits wide. The Table-1 register names come from
  the original design. The addresses and the last three registers are added
  here.
* **AXI4 read master** (`m_ar*`, `m_r*`) reads external memory. It issues
  single-beat 32-bit reads (`arlen=0`, `arsize=2`), up to `MAX_OUT` at a time,
  and expects responses in order. `rready` is always 1.
* **`irq_done`** pulses for one cycle when a run ends.
* **`res_row`, `res_col` → `res_data`** is a combinational read of the final
  output `X'`.

### External memory layout

`X` is stored at `IN_ADDR` as `seq_len x d_model` floats, row-major.

Each layer's parameters form one contiguous block of floats. Layer 0 starts at
`WT_ADDR`, and each following layer starts right after the one before. Matrices
are stored `[output][input]`, row-major, in this order:

```
W_Q, W_K, W_V      d x d each  (rows h*d_k .. h*d_k+d_k-1 belong to head h)
b_Q, b_K, b_V      d each
W_O                d x d
b_O, gamma1, beta1 d each
W_1                hidden x d
b_1                hidden
W_2                d x hidden
b_2, gamma2, beta2 d each
```

One layer therefore takes `4d² + 2·hidden·d + 9d + hidden` words. The original
design does not give a layout; this one is this design's choice.

## Architecture

```
            AXI4-Lite                     AXI4 read
               |                              |
           cfg_regs ---- cfg ----+        load_unit (fp2fix inside)
                                 |            | wr_en/row/col/data
                          controller (FSM) ---+--> weight/bias/gamma buffers
                                 |
   xin buffer --> H x [ qkv_pm -> qk_pm -> softmax_unit -> sv_pm ] --> att buffer
   att  --> ffn_pm (FFN1) + bias_add(b_O) --+
   xin  ------------------------------------+--> layer_norm --> l1 buffer
   l1   --> ffn_pm (FFN2) --> bias_add(b_1)+ReLU --> ffn_pm (FFN3) + bias_add(b_2) --+
   l1   ---------------------------------------------------------------------------+--> layer_norm --> xin
```

The modules run one after another. Each starts when the previous one has
finished, as in the original design. Inside a module, one result comes out per
clock, from a fully unrolled dot product.

### Controller sequence per layer

1. **LX** (first layer only): load `X`.
2. **LB**: load `b_Q`, `b_K` and `b_V` for every active head.
3. **LW / QKV**, repeated for each of the `d_model/TSM` column tiles:
   * load the `d_k x TSM` tiles of `W_Q`, `W_K` and `W_V` into every head;
   * run all heads' `qkv_pm` on that tile of `X`.
4. **QK, SM, SV**: scores, softmax and the attention output, with all heads in
   parallel.
5. **LBO, then LW1 / F1** for each output tile and each input tile: the FFN1
   tiles.
6. **LG1, LBE1, LN1**: load gamma and beta, then residual add and LN into `l1`.
7. **LB1, then LW2 / F2** for each tile: FFN2. Its output stays in FFN2's
   accumulators.
8. **LB2, then LW3 / F3** for each tile: FFN3. It reads FFN2's output through
   bias + ReLU, one `4*TSF`-wide tile at a time.
9. **LG2, LBE2, LN2**: residual add and LN into `xin`. Then go to the next layer,
   or raise done.

### Blocks

| Module | Function | Latency |
|---|---|---|
| `cfg_regs` | AXI4-Lite register file, start/done handshake | 1-cycle write and read responses |
| `load_unit` | walks a `rows x cols` block with a given row stride, issues reads, converts floats, writes `(row, col, value)` to a buffer | about 1 element per cycle when memory keeps up, plus memory latency and 3 cycles |
| `fp2fix` | float to Q7.8 conversion | 3 cycles |
| `qkv_pm` | one head's Q, K and V for one column tile: `3·TSM` multipliers, 40-bit accumulators across tiles, bias on the last tile | `seq_len·d_k + 2` cycles per tile |
| `qk_pm` | scores `Q K^T · (1/sqrt(d_k))`: `DK` multipliers. `1/sqrt(d_k)` is computed once per run with a serial square root and a serial divider | about 38 set-up cycles + `seq_len² + 2` |
| `softmax_unit` | row-wise softmax in place in the score buffer: max pass, exp-and-sum pass, one reciprocal per row, normalise pass | about `3·seq_len + 44` cycles per row |
| `sv_pm` | `P·V` for one head, `SL` multipliers, written into the concatenated attention buffer | `seq_len·d_k + 2` |
| `ffn_pm` | tiled linear layer `Y += X_tile · W_tile`, `KT` multipliers, `SL x DOUT` accumulators. It is used three times with tile shapes `TSF x TSF` (FFN1), `TSF x 4TSF` (FFN2) and `4TSF x TSF` (FFN3) | `seq_len·JT + 2` per tile |
| `bias_add` | `sat(x + b)`, optional ReLU | combinational |
| `layer_norm` | residual add, then mean, variance, `1/sqrt(var+eps)` (serial divider and square root), gamma and beta | about `3·d_model + 170` per row |
| `gelu` | `x·Phi(x)` by table and interpolation; a standalone block, not used by the top | combinational |
| `seq_div`, `seq_sqrt` | serial unsigned divider and integer square root | W cycles |

Multiplier count per head: `qkv_pm` uses `3·TSM` (192 by default), giving
2304 for 12 heads. This equals the original design's figure of
`3·h·d_model / tiles`.

### Arithmetic details
* **Score scale.** The scale is `1/sqrt(d_k)` in Q7.8, computed as
  `65536 / isqrt(d_k·2^16)` by integer division. Each score is
  `sat(acc_to_fx(dot) · scale >>> 8)`.
* **exp(x)** for `x <= 0` is computed as `2^(x·log2 e)`. A cubic polynomial
  gives the fraction part and a shift gives the integer part. The result is
  Q.16.
* **Softmax normalisation** is `p = e · (2^32 / sum) >> 24`.
* **Layer norm.**
  * `mean = sum/d`, rounded toward zero.
  * `var = sum((z-mean)²)/d` in Q.16.
  * `eps = 2^-16`.
  * `inv = 2^24 / isqrt(var + eps)`.
  * `out = sat(gamma · sat((z-mean)·inv >>> 16) >>> 8 + beta)`.

## Where this design departs from, or fills gaps in, the original

* **Attention scale.** The algorithm listing divides the scores by the
  embedding dimension. Its attention equation divides by `sqrt(d_k)`. This
  design follows the equation.
* **Softmax.** The algorithm listing uses one maximum and one sum for the whole
  score matrix. Its softmax equation normalises each row. This design follows
  the equation.
* **Tile counts.** The design-space exploration finds 24 MHA tiles and 6 FFN
  tiles best. The reported synthesis used `TS_MHA = 64` and `TS_FFN = 128`,
  which at `d_model = 768` gives 12 and 6 tiles. The synthesised values are
  used here.
* **Loading.** The original has separate load units for inputs, weights and
  biases, each with its own AXI master. Here one load unit with one AXI read
  port serves all loads. It uses single-beat reads with up to 8 outstanding.
* **Input buffer.** Each head in the original has its own input BRAM. Here one
  input buffer broadcasts the current tile to all heads.
* **Head control.** The heads run in lock step. The controller waits on head
  0's done pulse, and an assertion checks the others.
* **FFN modules.** The original writes the three FFN processing modules as
  separate functions. Here one parameterised module `ffn_pm` is instantiated
  three times. FFN3 unrolls `4·TS_FFN` multipliers so that it consumes a whole
  FFN2 output tile per pass.
* **Layer norm.** One `layer_norm` unit serves both normalisations of a layer.
  Its gamma and beta are reloaded in between.
* **Decoder layers are not implemented.** The original lists a decoder-layer
  register but does not describe the hardware for masked attention or
  cross-attention. The register is stored and ignored.
* **Output path.** The result is read through the `res_*` port rather than
  written back to external memory. The original does not describe the output
  path.
* **Not provided.** The processor, the interconnect, the memory controller,
  timers and UART are not part of this RTL. The testbenches play the
  processor's role over AXI4-Lite and model the external memory.
* **GeLU.** GeLU is provided as a unit but not connected. The encoder uses ReLU
  between FFN2 and FFN3, as the original's FFN does.

## Which published configurations fit

With the default parameters, these run:
* The BERT-base shape: SL 64, `d_model` 768, 12 heads, 12 layers, hidden 3072.
* The validation configurations with 8 heads: `d_model` 768 or 512, SL 64 or
  128.

These do not run:
* **The custom encoder** with `d_model` 200 and 3 heads. 200 is not a multiple
  of the 128 FFN tile, and 200/3 is not an integer head width. It would need
  zero-padding to `d_model` 256 done in software, and the head split would
  still not be even.
* **The "shallow transformer" and the four-layer custom encoder** used in the
  comparisons. Their dimensions are not given, so whether they fit cannot be
  known.

## Testbenches (`tb/`)

Every testbench checks its block against results worked out independently in
integer arithmetic. The model for that is `tb_ref_pkg.sv`, and the
accelerator-level model is in `tb_top_common.svh`. Each testbench checks cycle
counts where a latency is given and has a watchdog. Each ends by printing
`TB_RESULT checks=N failures=M`.

| Testbench | What it covers |
|---|---|
| `tb_fp2fix` | exact conversions, truncation, specials, 3-cycle latency |
| `tb_bias_add`, `tb_gelu` | exhaustive and random values, saturation, ReLU; GeLU against a real-valued erf |
| `tb_cfg_regs` | register read-back, start pulse, start ignored while busy, sticky done |
| `tb_load_unit` | blocks with strides, with and without memory stalls, each element written once, throughput |
| `tb_qkv_pm`, `tb_qk_pm`, `tb_sv_pm`, `tb_ffn_pm` | bit-exact results over several tiles and sizes, restart of accumulation, exact cycle counts |
| `tb_softmax_unit` | bit-exact against the integer model and within 6/256 of a real softmax; row sums |
| `tb_layer_norm` | bit-exact; mean ≈ 0 and variance ≈ 1 with unit gamma; a constant row |
| `tb_adaptor_top` | reduced sizes (SL 8, D 32, H 4, DK 16, HID 128, tiles 4/8); three runs with different register settings including a 2-layer stack; random memory stalls; counters confirm tiling, several layers, reconfiguration, softmax, LN, ReLU clamps and stalls |
| `tb_adaptor_full` | the top at its default (full) sizes with small register settings: two runs (2 heads of 64, then 4 heads of 32; SL 4/3, `d_model` 128, hidden 512) |
| `tb_adaptor_bert` | the top at its default sizes running one layer of the BERT-base shape (`d_model` 768, 12 heads of 64; SL 8 and hidden 1024 to keep the run near two minutes), with every attention and FFN1 tile; about 3.9 M parameter words streamed |

Run any of them with plain Verilator, for example:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb --top-module tb_adaptor_top \
    rtl/adaptor_pkg.sv tb/tb_ref_pkg.sv $(ls rtl/*.sv | grep -v adaptor_pkg) \
    tb/tb_axi_mem.sv tb/tb_adaptor_top.sv
./obj_dir/Vtb_adaptor_top
```

Packages go first. `-Wno-fatal` keeps width warnings on index expressions from
stopping the build.

`tb_axi_mem.sv` is a behavioural AXI4 read memory with a fixed latency and
optional random stalls on `arready` and `rvalid`.

## Notes on tools

The full-size top has 12 heads, large accumulator arrays and 512-wide
FFN2-to-FFN3 paths, so elaborating it in a synthesis front end takes several
minutes. The same code at the reduced test sizes elaborates in seconds. The
large buffers are written as arrays (`acc`, `xin`, `att`, `l1`, the score
buffers) so that tools can map them to memories.
