# SwiftKV-MHA: single-pass attention and GEMV on one processor array

This is synthesizable SystemVerilog for a decode-phase accelerator for 32-head LLMs
(LLaMA2-7B, ChatGLM-6B class: hidden size 4096, 32 heads of 128 dimensions, W4A8
weights/activations). It rests on two ideas:

1. **SwiftKV attention.** The softmax-weighted sum over the KV cache is computed in one
   pass, one token at a time, without ever storing the score vector. A running maximum
   `mu`, a running denominator `Z` and a running numerator vector `Y` are updated per token
   so that every exponential has a non-positive argument. Attention over `N` cached tokens
   then costs one dot product and one vector update per token, about `4N` cycles.
2. **One MAC array, two formats.** Each head owns a processor whose 128-multiplier MAC
   array is used for two jobs. In attention it computes 32 products of 32-bit fixed point
   (Q15.17) per cycle. In the weight GEMVs it computes 128 INT8 x INT4 products per cycle.
   The same 32 processors therefore run the per-head attention in parallel, and together
   produce one element of a 4096-wide GEMV per cycle.

Around the processors are:

- a **Dispatcher**, which moves vectors between the Global Buffer, the processors and the SFU;
- a **Special Function Unit (SFU)**, which does adds, quantisation, Hadamard product, SiLU and
  RMS norm;
- a **Global Buffer** for a layer's vectors.

Each processor streams weights and KV cache from its own port to the off-chip HBM. The HBM
memory controller and the HBM are not part of this RTL. Their streams are ports of the top
module `swiftkv_mha`.

## 1. The SwiftKV update

For a query `q` and cached pairs `(k_t, v_t)`, let `s_t = q·k_t / sqrt(128)`. Each token is
handled in one of two ways:

| case | factor | update |
|---|---|---|
| `s_t <= mu` | `beta = exp(s_t - mu)` | `Z += beta`, `Y += beta * v_t` |
| `s_t > mu` | `alpha = exp(mu - s_t)` | `Z = alpha*Z + 1`, `Y = alpha*Y + v_t`, `mu = s_t` |

The output is `Y / Z`. This is the usual "online softmax". What is particular here is how
the two cases are arranged. In both, the exponential's argument is the negated absolute
difference `-|s_t - mu|`. So one exponential unit that only covers `x <= 0` is enough, and
the factor lies in `(0, 1]`.

In hardware (`skv_core`), two multiplexers choose the operands:

- which value is scaled: `Z` or the constant 1, and `Y` or `v_t`;
- which value is added: the other one of each pair.

The first token of a step is forced down the `s > mu` path with `Z = Y = 0`, which sets
`mu = s_1`, `Z = 1` and `Y = v_1`.

The core is a pipeline fed once every four cycles:

1. **Accumulate.** Four partial dot products arrive from the MAC array, 32 dimensions
   each. They are added and scaled by `1/sqrt(128)`.
2. **Compare.** Subtract `mu`, select the branch and update `mu`.
3. **Exponential.** The four-stage exponential unit produces the factor.
4. **Update Y and Z.** The vector update takes four cycles, at 32 lanes per cycle.

The four-cycle vector update matches the four cycles a dot product takes on the shared
array, so tokens flow at one per four cycles with no stalls.

The `v` chunks come with the keys. They wait in a small FIFO until their token's factor
is known.

After the last token, a sequential divider forms `2^31 / Z` once. `Y` is then multiplied
by it in four chunks.

Numerics:
- All values are Q15.17.
- `Z` lies in `[1, N]`, so contexts up to 32767 tokens cannot overflow it.
- `Y` stays within `N * max|v|`.
- Against double-precision softmax attention, outputs agree to better than `2e-3`. The
  test inputs are `|q| < 2`, `|k| < 1.5` and `|v| < 2`, at `N = 512`.

## 2. The exponential

`exp(x) = 2^(x·log2 e)` is split into an integer part `n` and a fraction `f` in `(-1, 0]`.

The fraction is evaluated by piecewise-linear interpolation over a 32-entry table:
- the 5 most significant fraction bits select `LUT[i] = 2^(-i/32)` and the slope
  `delta_i = LUT[i] - LUT[i+1]`;
- the remaining 12 bits `f2` give `2^f = LUT[i] - delta_i·f2 / 2^12`.

The result is then shifted right by `n`. Arguments below `-17·ln 2` give 0.

The table and slopes are computed at elaboration from their formula. There is no data
file.

The measured maximum relative error on `(-1, 0]` is `7.3e-5`. The 17-bit rounding of the
table entries is most of it.

## 3. One MAC array, two number formats

`skv_public_mac_array` has 128 multiplier slots and works in one of two modes.

**GEMV mode.** Slot `i` multiplies INT8 `x_i` by INT4 `w_i`, and an adder tree returns
the INT32 dot product of 128 elements.

**Attention mode.** Four slots form one 32x32-bit product from 17-bit limbs:

    A·B = A_lo·B_lo + (A_hi·B_lo << 17) + (A_lo·B_hi << 17) + (A_hi·B_hi << 34)

where `A_lo = A[16:0]` (unsigned) and `A_hi = A[31:17]` (signed). The 32 exact products
are summed and the sum is shifted right by 17. Each slot's product fits the 27x18
multiplier of the FPGA DSP the design was sized for.

Latency is two cycles in both modes. The mode is chosen per operation by the SKV unit.

## 4. Incremental RoPE

During decoding, the position only ever advances by one. Each pair `i` caches
`cos(m·θ_i)` and `sin(m·θ_i)`, with `θ_i = 10000^(-2i/128)`. The next position is reached
with the angle-addition identities, using the constants `a_i = cos θ_i` and
`b_i = sin θ_i`:

    cos((m+1)θ) = a·cos(mθ) − b·sin(mθ)
    sin((m+1)θ) = a·sin(mθ) + b·cos(mθ)

The new pair `(x0, x1)` is then rotated by that angle. This avoids computing a cosine of
an angle that grows without bound.

`skv_rope` is a three-stage pipeline:

1. four angle products;
2. the new cos/sin, which is written back to the cache when the element is committed;
3. the rotation.

`q` passes first without committing. `k` then passes with commit, so the position moves
by one per decoded token.

The angles carry 30 fraction bits. With them the recursion stays within `2e-5` of the
true values after 5000 steps. A load port can set any position, for example to resume a
conversation.

Only the new token's `q` and `k` are rotated. Keys already in the cache were stored after
rotation.

## 5. Processor, unit and memory

An **SKV processor** (`skv_processor`) is an SKV unit plus its KV-Weight Memory. The
memory is a 128 x 2048-bit first-word-fall-through FIFO between the memory-controller
port and the unit.

The memory word has two layouts:

- **attention:** bits `[1023:0]` hold 32 lanes of `k` and bits `[2047:1024]` hold the
  same 32 lanes of `v`, so one token is four words;
- **GEMV:** 128 INT4 weights of one output row, in bits `[511:0]`.

The **SKV unit** (`skv_unit`) holds a buffer with one INT8 GEMV chunk and the `q`, `k`
and `v` of the new token. It also holds the RoPE module, the MAC array and the core. It
runs two operations:

- **GEMV (`len` outputs).** One weight word is consumed per cycle, giving one INT32
  partial sum per cycle. The stream stalls if the memory runs empty.
- **ATTN (`len` = context length including the new token).** It runs four phases in
  order:
  1. RoPE on `q` and `k`: 128 pairs, plus 3 cycles to drain the pipeline.
  2. Write-back of `RoPE(k)` and `v` as four words on `wb_*`. The memory system appends
     these words to the head's KV cache.
  3. Attention over `len × 4` words from the KV-Weight Memory. Each word's key quarter goes
     to the MAC array with the matching `q` quarter. Its value quarter goes to the core.
  4. Normalisation. The result comes out as four chunks of 32.

**The new token's `(k, v)` must be in the stream.** The unit does not insert the new
token into its own attention stream. The memory system must send the cached tokens and
then the four words it just received on `wb_*`. The testbenches' memory model does
exactly this.

## 6. Dispatcher, SFU and Global Buffer

The **Global Buffer** (`skv_global_buffer`) has 4096 words of 1024 bits. A word holds
32 FXP32/INT32 values or 128 INT8 values. It has two read ports and one write port, and
its reads are synchronous.

The **Dispatcher** (`skv_dispatcher`) executes one command at a time. A command is a
`cmd_t` with fields `cmd`, `sfu_op`, `bsel`, `src_a`, `src_b`, `dst`, `len` and `scale`.

| command | effect |
|---|---|
| `CMD_GEMV` | Sends word `src_a + p` (128 INT8) to processor `p`, `p = 0..31`. Starts all processors on `len` outputs. Lines up the 32 partial-sum streams. Sums them with the SFU's EM-Add. Packs 32 INT32 results per word from `dst`. One output per cycle. With a non-zero `scale`, EM-Add also dequantises each sum (`sum·scale`, Q15.17), and the words hold FXP32. |
| `CMD_SCATTER` | Sends 128 FXP32 words from `src_a` to the heads: head `p` gets words `4p..4p+3` as its `q`, `k` or `v` (`bsel`). |
| `CMD_ATTN` | Starts all 32 heads on a `len`-token attention step. Collects the head outputs and writes them as 128 words, concatenated by head, from `dst`. |
| `CMD_SFU` | Streams `len` words from `src_a` (and `src_b`) through the SFU one element per cycle and writes the results from `dst`. |

Details of `CMD_SFU`:

- `SFU_FXP_I8` packs four input words into one INT8 output word.
- `SFU_RMSNORM` reads its input twice. The first pass sums squares. The second pass
  multiplies by the gain vector at `src_b`.

**GEMV stream alignment.** The 32 partial sums of one output element must reach EM-Add in
the same cycle. In practice the 32 weight streams do not start in the same cycle.
Depth-8 FIFOs absorb the skew, which may reach 8 cycles. Past that, an assertion fires.
The memory system is expected to deliver the 32 streams at the same average rate.

The **SFU** (`skv_sfu`) operations:

| operation | computation | time |
|---|---|---|
| EM-Add | registered 32-input INT32 adder tree, optionally times a dequantisation scale | 1 output/cycle |
| ADD | `a + b` | 1/cycle |
| HADAMARD | `a·b` in Q15.17 | 1/cycle |
| I32→FXP | `a·scale` (dequantisation with one scale per command) | 1/cycle |
| FXP→I8 | `round(a·scale)`, saturated to [−128, 127] | 1/cycle |
| SiLU | `x / (1 + e^{−x})`, with the exponential unit and a 48-stage pipelined divider | 1/cycle, 54-cycle latency |
| RMS norm | pass 0: `Σa²`; then `1/sqrt(mean + 1e−5)` by divide and square root; pass 1: `a·inv·gain` | 2 passes |

A decoder layer is a command sequence on these blocks:

1. GEMV for `Q`, `K` and `V`, dequantised on the way by EM-Add (or
2. dequantised afterwards with `SFU_I32_FXP`, e.g. for the per-part sums of a long GEMV);
3. scatter `q`, `k` and `v`;
4. ATTN;
5. quantise the head outputs to INT8;
6. GEMV for `W_o`;
7. add the residual;
8. RMS norm;
9. the FFN GEMVs;
10. SiLU and the Hadamard product.

An FFN down-projection has more than 4096 inputs. It is done as several 4096-input GEMVs
whose INT32 results are added with `SFU_ADD`.

The top adds a host port (`h_*`). It writes and reads Global Buffer words while no command
runs, and is used to bring in a layer's input and to read results.

## 7. Timing (measured in simulation at the default size)

| operation | cycles |
|---|---|
| GEMV, 4096 INT8 inputs → 4096 outputs | 4145 (one output per cycle + 49 start-up); 4137 with fused dequantisation |
| ATTN, 32 heads × 512 tokens, in parallel | 2383 = 4·512 + 335 (RoPE 131, write-back, pipeline, 50-cycle divide, output) |
| single head, 101 tokens (unit alone) | 608 |
| SFU simple ops, per 32-element word | ≈36 |
| SiLU, 128 elements | 366 |

At 225 MHz, a 4096×4096 GEMV takes about 18 µs. A LLaMA2-7B token needs at least about
1.6 M GEMV cycles (7 ms) with this organisation, before the HBM and SFU time that the
paper's 12.3 ms per token includes.

## 8. Where this RTL departs from the paper, or fills gaps

- **Y update width.** The core updates `Y` 32 lanes per cycle with its own 32 multipliers.
  This keeps up with one token per four cycles. The paper's DSP budget (140 per processor)
  suggests a narrower update path, but it does not describe one.
- **RoPE multipliers.** RoPE uses eight multipliers (four for the angle, four for the
  rotation). The paper states that four suffice, without showing how.
- **Score scaling.** The `1/sqrt(128)` scale is applied to the score, not to `q`. The
  result is the same up to rounding.
- **Exponential error.** The error is `7.3e-5` against the `5.86e-5` the paper reports for
  its unit.
- **Element-serial SFU.** The SFU takes one element per cycle, and commands run
  back-to-back without overlap. The paper overlaps type conversion with computation.
  Here only the GEMV dequantisation is overlapped (fused into EM-Add). INT8
  quantisation and the other conversions are separate passes.
  The dispatcher also waits for all 32 results of a Global Buffer word before it reads
  the next one. With SiLU's 54-cycle latency, a word takes about 91 cycles, not 34.
- **Memory sizes.** The KV-Weight Memory (256 Kbit per processor) and the Global Buffer
  (4 Mbit) were sized from the block-RAM counts of the paper's implementation. The FIFO
  organisation of the KV-Weight Memory is a choice.
- **Command set.** The dispatcher command set, the data layouts, the host port and the
  valid/ready memory ports (instead of AXI) are this design's own.
- **Not built.** The HBM controller and the HBM are not included.

## 9. Files and simulation

`rtl/` has one module or package per file:

| file | contents |
|---|---|
| `skv_pkg.sv` | sizes, types, commands |
| `skv_exp_unit.sv` | exponential unit |
| `skv_public_mac_array.sv` | dual-mode MAC array |
| `skv_divu.sv`, `skv_isqrt.sv` | sequential divider, square root |
| `skv_divp.sv` | pipelined divider (SiLU) |
| `skv_core.sv` | SwiftKV core |
| `skv_rope.sv` | incremental RoPE |
| `skv_kvw_memory.sv` | KV-Weight Memory |
| `skv_unit.sv` | SKV unit |
| `skv_processor.sv` | SKV processor |
| `skv_global_buffer.sv` | Global Buffer |
| `skv_sfu.sv` | SFU |
| `skv_dispatcher.sv` | Dispatcher |
| `swiftkv_mha.sv` | top |

`tb/` has one self-checking testbench per block, named `tb_<module>`. Each prints
`TB_RESULT checks=N failures=M`. The testbenches that matter most:

- **`tb_swiftkv_mha`** runs the top at its default size:
  1. a 4096×4096 GEMV, checked exactly and for one output per cycle;
  2. dequantisation, as a separate SFU pass and fused into a second GEMV;
  3. a 512-token attention step on all 32 heads, checked against real-valued RoPE and
     softmax attention, and for `≈4N` cycles;
  4. INT8 quantisation, residual add, RMS norm over 4096 elements, SiLU and Hadamard.

  It counts the mechanisms each step exercises and fails if one never occurs: GEMV stream
  skew, KV-memory back-pressure, EM-Add, the MAC mode switch, RoPE, both SwiftKV branches,
  INT8 packing, the RMS second pass, SiLU elements on back-to-back cycles and fused dequantisation.
- **`tb_skv_dispatcher`** runs the same sequence with 4 processors.
- **`tb_skv_core`** and **`tb_skv_unit`** check attention against a real-arithmetic
  reference.

To simulate with Verilator 5:

    verilator --binary --timing --assert -Irtl -y rtl rtl/skv_pkg.sv tb/tb_swiftkv_mha.sv \
              --top-module tb_swiftkv_mha -o sim && ./obj_dir/sim

The full-size run compiles in about 2.5 minutes and simulates in a few seconds. Other
testbenches build the same way with their own top module.

Registers that are read are all reset. Memories (Global Buffer, KV-Weight Memory, FIFOs)
are not reset and need not be.
