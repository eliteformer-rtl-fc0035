# ELiTeFormer generation accelerator in SystemVerilog

ELiTeFormer is a LLaMA-3-style decoder built to suit FPGA hardware. It changes two things against a standard decoder:

- **Ternary projections.** Every linear projection is a BitNet b1.58 "BitLinear" layer. Its weights are in {-1, 0, +1} and its activations are INT8. A multiply therefore reduces to pass, negate or drop, so the projections need no multipliers.
- **Constant-size attention.** Softmax attention over the whole context is replaced by a hybrid of two parts:
  - Hedgehog linear attention, which keeps a fixed-size recurrent state per head;
  - softmax attention over a sliding window of the last 256 tokens.

  The per-token cost and memory of a generation step are therefore the same at every context length.

This RTL implements the generation (decode) side of that design:

- a mask-based ternary processing element (the "ELTF PE") and the PE array around it;
- BitLinear engines that stream packed weights over AXI4;
- the hybrid attention datapath, with its state in external memory;
- a four-stage layer pipeline that overlaps different batches.

Prefill is assumed to happen on another device. The accelerator receives token embeddings, runs `n_layers` decoder layers for every sequence in flight, and hands back the updated residual stream.

Everything is plain synthesizable SystemVerilog. It has been checked with Verilator 5 and with the slang front end of Yosys. All numbers inside are fixed point (see "Departures" below).

## 1. What one layer computes

For each token row `x` (an MB × D_MODEL slice of the residual stream):

```
qkv = BitLinear_QKV(x)                         D_MODEL -> HQ*DH + 2*HKV*DH
for every kv head g and its NQ = HQ/HKV query heads h:
    phi(u)  = exp(u · Wf[g])                   Hedgehog feature map, F outputs
    S[g]   += phi(k)^T v ;  z[g] += phi(k)     linear-attention state update
    window : cache[pos % W] = (k, v)           oldest pair dropped
    num_h   = phi(q_h) S + Σ_window e_t v_t ,  e_t = exp(q_h·k_t / sqrt(DH))
    den_h   = phi(q_h)·z + Σ_window e_t
    o_h     = num_h / den_h
x  += BitLinear_O(concat(o))
h   = BitLinear_12(x)                          D_MODEL -> [up ; gate], 2*D_FFN
x  += BitLinear_3( silu(gate) * up )           D_FFN -> D_MODEL
```

Each BitLinear layer runs the same four steps:

1. It normalises its input with RMSNorm, using learned gains γ.
2. It quantises the input per token to INT8 by absmax:
   `xq = round(127·xγ / max|xγ|)`.
3. It computes the ternary matrix product as integers.
4. It scales the integer result back by `s_act·s_w`, where
   - `s_act = max|xγ| / (127·rms(x))`;
   - `s_w` is the layer's weight scale.

Because `rms(x)` cancels inside `xq`, it enters only the scale.

Number formats:

| quantity | format |
|---|---|
| activations, residual stream, q/k/v, attention output | signed 16-bit Q8.8 |
| quantised activations | INT8 |
| projection sums | INT32 |
| RMSNorm gains, feature-map weights | Q8.8 |
| weight scale `s_w`, activation scale `s_act` | Q16.16 |
| exponentials, attention numerators/denominators, state S and z | Q.16 in 64-bit words |

## 2. The ternary PE and the projection engine

### Weight encoding

A 2-bit weight code selects three masks (`eltf_pkg::tern_mask`):

| code | weight | flip | pass | cpl |
|---|---|---|---|---|
| 00 | 0 | 0 | 0 | 0 |
| 01 | +1 | 0 | 1 | 0 |
| 11 | −1 | 1 | 1 | 1 |
| 10 | 0 (unused) | 0 | 0 | 0 |

Packing:

- Four codes form an 8-bit weight dataframe, with weight `n` in bits `[2n+1:2n]`.
- 64 dataframes (256 weights) fill one 512-bit memory frame, with dataframe `k` in bits `[8k+7:8k]`.

### The PE (`eltf_pe`)

The PE holds four INT8 inputs stationary. Each clock it takes one dataframe and forms four terms:

```
term_n = ((x_n ^ {9{flip}}) & {9{pass}}) + cpl
```

This is a 9-bit two's-complement negate, pass or zero. A reduction tree adds the four terms, and the sum is added to the output value read from the output buffer. The result is registered, so the latency is one clock. No multiplier is involved.

### The PE array (`eltf_pe_array`)

The array has MB rows (mini-batch tokens) by NCOL columns.

- Every PE of row `r` holds the same four inputs of token `r`.
- Every PE of column `c` receives the same dataframe.

Input groups `g` (four inputs each) form the outer loop. Output blocks `jb` form the inner loop, and PE column `c` produces output `j = jb·NCOL + c`. Each PE reads `obuf[r][c][jb]`, adds its terms and writes the result back. For `g = 0` the read is replaced by zero, so no clearing pass is needed.

One projection takes `D_IN/4 · (D_OUT/NCOL + 1) + 2` clocks. The `+1` per group is the clock that loads the next four inputs. This count is checked in the array's testbench.

### The weight stream order

The weights of a projection are stored in exactly the order the array consumes them: input group outer, output index inner. Dataframe `n` of the stream therefore belongs to group `n / D_OUT` and output `n % D_OUT`.

### Memory image of one projection (`bitlinear`)

Starting at byte address `base`:

| frames | contents |
|---|---|
| 0 | `s_w` (Q16.16) in bits [31:0] |
| 1 .. D_IN/32 | RMSNorm gains, 32 Q8.8 values per frame, element `k` in bits `[16(k%32)+15 : 16(k%32)]` |
| then D_IN·D_OUT/256 | ternary weights in the order above |

### `bitlinear` sequence

1. Read frame 0 and the gain frames.
2. Quantise each of the MB token rows through `act_quant`. This takes two passes of D_IN clocks each, plus short sqrt and divide steps.
3. Load the INT8 rows into the array while the weight reader pre-fills the weight buffer.
4. Run the array.
5. Stream out `y = sat16((acc · s_act · s_w) >>> 24)` on `y_valid / y_row / y_idx / y_data`. This uses one 96-bit product and a single truncation.

`D_IN` must be a multiple of 32, and `D_IN/4 · D_OUT` a multiple of 64.

## 3. Streaming weights over AXI

Each BitLinear engine owns one AXI4 read master (`axi_weight_reader`):

- INCR bursts of 64-byte beats;
- at most 64 beats (4 kB) per burst;
- a burst is cut short at every 4 kB address boundary;
- one burst in flight at a time.

A burst is issued only when the weight buffer reports enough free frame slots (the `credit` input), so the read-data channel is never back-pressured for long. Assertions check that `ARLEN` stays below 64, that no burst crosses 4 kB, and that the address channel is held stable while it stalls.

`weight_buffer` is a frame FIFO whose storage is split into NCOL banks. Dataframe `k` of a frame goes to bank `k % NCOL`, so column `c` always reads bank `c`. With NCOL = 4 the array consumes one frame every 16 clocks. One 512-bit beat per 16 clocks per engine is all the bandwidth a projection needs.

## 4. Hybrid attention

`attn_head` handles one token and one key/value head together with its NQ query heads, all NQ of them in parallel. It runs two units in sequence on a single state-memory port, then normalises.

### `hedgehog_la` (linear part)

1. It computes `phi(k)` and the `phi(q_h)` for all heads in one pass over the feature-map weights `Wf[i][j]`, stored at `fmap_base + j·D + i`. The same `Wf` serves q and k.
2. It streams the state once:
   - `S[i][j]` at `ctx + i·D + j` is read, `phi(k)_i·v_j` is added, the result is written back, and `phi(q_h)_i · S_new[i][j]` is accumulated into each head's numerator;
   - `z[i]` at `ctx + F·D + i` gets the same treatment for the denominator.

Because the new token is added before the query reads the state, the current token attends to itself through the linear part as well. This takes about `2·F·D + F` clocks.

### `sw_attn` (window part)

1. It writes the current `k` and `v` to slot `pos % W` of a ring cache:
   - K at `ctx + s·D + i`;
   - V at `ctx + W·D + s·D + i`.

   From `pos = W` on, this overwrites the oldest pair, which is the "dequeue" of the window.
2. For each of the `n = min(pos+1, W)` valid slots, it reads K, forms `e = exp(q_h·k / sqrt(D))` for every head, then reads V and accumulates `e·v` and `e`.

This takes `2D + n(2D+2) + 3` clocks, which is also checked.

### Combining

`attn_head` adds the numerators and the denominators of the two parts. It then divides once per head, as a 64-cycle reciprocal `2^40/den` followed by D multiplies, and saturates to Q8.8. The whole group costs about 100 k clocks at D = F = 128, W = 256, whatever the context length.

### `exp_fx`

`exp_fx` is combinational:

- `x` (Q16.16, clamped to [−12, 8)) is scaled by log2 e;
- the result is split into an integer and a fraction;
- `2^f ≈ 1 + 0.6565f + 0.3435f²`, with relative error below 0.3 %;
- the value is shifted by the integer part.

Neither the window nor the feature map subtracts a running maximum before exponentiating. Q8.8 inputs with typical magnitudes stay well inside the clamp.

## 5. The layer pipeline and the top level

### Stages

`eltf_top` splits a layer into four stages, each with its own hardware:

| stage | work | engine |
|---|---|---|
| QKV | copy x, BitLinear D_MODEL → HQ·DH + 2·HKV·DH | bitlinear #0 |
| attn | per row and kv head: load q/k/v, `attn_head`, concatenate heads; BitLinear_O; residual add | attn_head + bitlinear #1 |
| FFN12 | copy x, BitLinear D_MODEL → 2·D_FFN (up, gate) | bitlinear #2 |
| FFN3 | `silu(gate)·up` element by element; BitLinear D_FFN → D_MODEL; residual add | seq_div + exp_fx + bitlinear #3 |

SwiGLU uses `silu(g) = g / (1 + e^{-g})`. The reciprocal comes from a 40-bit divider, one element at a time.

### Scheduling (`stage_sched`)

`stage_sched` enforces two rules:

- Stage `s` may start batch `b` only after stage `s−1` has finished `b`. Batches enter each stage in order.
- The next layer's QKV starts only when FFN3 has finished the last batch of the current layer. This is the layer barrier.

With NB = 2 batches, batch 1 therefore runs in stage `s` while batch 0 runs in stage `s+1`. This is the overlap that gives the design its throughput. Within one batch, a stage never starts before its predecessor has produced the whole token, because the RMSNorm in front of every projection needs the full vector.

### On-chip buffers

| buffer | size | contents |
|---|---|---|
| `xres` | NB × MB × D_MODEL | residual stream |
| `qkv` | NB × MB × (D_MODEL + 2·HKV·DH) | QKV stage output |
| `hbuf` | NB × MB × 2·D_FFN | FFN12 output |

### Off-chip data

Weights:

- Stage `s` of layer `l` reads its projection at `proj_base[s] + l·layer_stride`.
- Each of the four AXI masters appears as one element of the `m_*` port arrays.

Attention state sits behind the `st_*` port: 64-bit words, read data one clock after `st_re`, one write per clock.

- The context of (layer `l`, batch `b`, row `r`, kv head `g`) starts at word `((((l·NB + b)·MB + r)·HKV + g) · CTX_WORDS)`, where `CTX_WORDS = F·DH + F + 2·W·DH`. The context holds S, then z, then the window's K and V.
- The feature-map weights of (l, g) start at `FMAP_BASE + (l·HKV + g)·DH·F`, where `FMAP_BASE = NL·NB·MB·HKV·CTX_WORDS`.

### Host sequence for one generation step

1. Write the new token embeddings with `x_we / x_batch / x_row / x_idx / x_data`.
2. Set `pos` (the token's index in its sequence) and `n_layers`.
3. Pulse `start`.
4. Wait for `done`.
5. Read the residual stream back through `x_rd_*`, which has one clock of latency.

The final norm and LM head are outside this design.

## 6. Files

| file | contents |
|---|---|
| `rtl/eltf_pkg.sv` | shared constants, types, mask decode, saturation |
| `rtl/eltf_pe.sv` | ternary mask-based PE |
| `rtl/eltf_pe_array.sv` | MB × NCOL input-stationary PE array with output buffers |
| `rtl/weight_buffer.sv` | banked frame FIFO |
| `rtl/axi_weight_reader.sv` | AXI4 burst read master |
| `rtl/act_quant.sv` | RMSNorm + absmax INT8 quantiser |
| `rtl/bitlinear.sv` | complete ternary projection engine |
| `rtl/hedgehog_la.sv` | linear attention with streamed state |
| `rtl/sw_attn.sv` | sliding-window attention with ring cache |
| `rtl/attn_head.sv` | hybrid combination for one kv head |
| `rtl/stage_sched.sv` | batch/stage/layer scheduler |
| `rtl/eltf_top.sv` | top level |
| `rtl/seq_div.sv`, `rtl/isqrt.sv`, `rtl/exp_fx.sv` | arithmetic helpers |
| `tb/tb_<module>.sv` | self-checking testbench per module |
| `tb/tb_eltf_top.sv` | end-to-end test at reduced size |
| `tb/tb_eltf_top_full.sv` | one layer at full default size |
| `tb/axi_mem_model.sv` | behavioural AXI4 memory |
| `tb/st_mem_model.sv` | behavioural state memory |

## 7. Verification

Every testbench computes its expected values independently, with real arithmetic or integer reference models. Each one prints `TB_RESULT checks=N failures=M` and stops itself through a watchdog.

| testbench | what it checks |
|---|---|
| tb_eltf_pe | 2000 random input/dataframe/accumulator triples against the integer dot product |
| tb_eltf_pe_array | full projections at MB=2, NCOL=4 against a ternary matrix product, including back-to-back runs and the exact clock count |
| tb_weight_buffer | random frame traffic with random stalls on both sides; every dataframe in order, full/empty behaviour |
| tb_axi_weight_reader | runs that start near and across 4 kB boundaries, with burst count and length, data order and stalls |
| tb_act_quant | INT8 outputs against `round(127·xγ/max)` (within 0.52 of a step) and the scale to 1 % |
| tb_bitlinear | full projection from a memory image against a real-valued BitLinear |
| tb_hedgehog_la, tb_sw_attn, tb_attn_head | numerators, denominators, outputs and the state and cache written back, over several steps including window wrap-around, against real `exp`; clock counts |
| tb_stage_sched | the ordering rules, the layer barrier and the amount of overlap |
| tb_eltf_top | end-to-end run (details below) |
| tb_eltf_top_full | full-size run (details below) |

**tb_eltf_top.** This is the end-to-end test at MB=2, NB=2, two layers, D_MODEL=32, 4 query heads on 2 kv heads of 8, F=8, W=2 and D_FFN=64.

- It runs three generation steps. Each step starts with new embeddings, and the stream is compared after each step with a real-valued model of the whole layer stack. That model has its own attention state and window.
- It counts five mechanisms and fails if any of them never happens:
  - stage overlap between batches;
  - a second layer after the barrier;
  - window pairs dropped;
  - linear state read back;
  - bursts on all four weight ports.
- The largest deviation is about 35 LSB of Q8.8 after two layers. The source is INT8 rounding: an element whose scaled value sits near a half step can round the other way in the reference, and the difference then propagates through the layers. The test allows 4 LSB + 4 % of the largest value.

**tb_eltf_top_full.** This test instantiates the top with every parameter at its default and runs one complete step of one layer over both batches (4 tokens):

- The AXI memory models generate the 1.7 GB of weight frames from a hash of the frame address instead of storing them.
- All 16 384 outputs are compared with a real-valued model.
- The step takes 23.2 M clocks. In Verilator it runs in about a minute and a half, compile included.

Each module was also run with a deliberately broken copy, and every testbench reported failures against it:

- PE: the +1 of the negation dropped;
- PE array: the output buffer not cleared;
- AXI reader: one frame short;
- scheduler: starting an unfinished batch.

### Running a testbench with Verilator

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/eltf_pkg.sv tb/tb_eltf_top.sv \
          --top-module tb_eltf_top -o sim -Mdir build && ./build/sim
```

Replace the testbench name for the others. Sub-modules are found through `-Irtl`. `-Wno-fatal` keeps the remaining width warnings from stopping the build.

## 8. Sizes and how the design compares

### Default parameters

The defaults are those of the 8B model the accelerator is meant for:

- D_MODEL = 4096;
- 32 query heads and 8 kv heads of 128;
- D_FFN = 14336;
- 32 layers;
- window 256;
- feature dimension 128;
- MB = 2 tokens per batch and NB = 2 batches in flight;
- NCOL = 4 PE columns.

The window of 256, the two-token mini-batch, two batches in the pipeline, four weights per 8-bit dataframe, 512-bit frames and 4 kB bursts are the published numbers. The remaining model sizes are the LLaMA 3 8B shape the model is derived from.

The smaller deployed model (D_FFN = 8096, six layers) needs `D_FFN` changed at elaboration. `n_layers` is a run-time input.

### Speed

The PE count is the largest gap between this RTL and the published performance. Each engine has MB × NCOL = 8 PEs, and a 4096 × 4096 projection therefore takes 1.05 M clocks, against the roughly 435 k reported. A full 32-layer step for two batches takes about 0.74 G clocks: about 2.7 s at 275 MHz, compared with 120 ms reported. Making the engine faster means raising NCOL and MB. Both are parameters. The buffer depth and the AXI credit scale with them, but the bandwidth needed per engine scales the same way.

## 9. Departures from the published design

- **Fixed point instead of floating point.** The published design keeps RMSNorm gains, feature maps and the attention arithmetic in FP32 or FP16. Here everything outside the ternary product is fixed point:
  - Q8.8 activations and gains;
  - Q16.16 scales;
  - Q.16 exponentials and sums in 64-bit words.

  The error this introduces is measured by the end-to-end tests above. Long contexts with large state values have not been characterised.
- **Positional embeddings are not implemented.** The QKV stage is described as including them, but not in a form that could be built. q and k go to attention exactly as projected.
- **The attention parts run one after the other.** Linear attention and the window run in sequence on one state port, and the kv heads of a token are processed one after another. The published block runs the two attention parts in parallel for each head. Within a kv head, its query heads are processed in parallel, as published.
- **Broadcast instead of neighbour-to-neighbour.** The PE array broadcasts inputs along rows and weights down columns. The published array is drawn as roughly systolic, with values passed between neighbouring PEs.
- **Concatenated projections.** Q, K and V are one concatenated BitLinear, and so are up and gate. Each concatenation shares one RMSNorm and one absmax scale, because the members share their input.
- **Design choices where nothing is published:**
  - the SwiGLU gate;
  - the on-chip residual stream and its adds;
  - the weight and state memory layouts;
  - the 2-bit weight code and bit order;
  - the handshakes, widths and reset behaviour.
- **Word port for attention state.** The published design reads and writes the linear-attention state and window cache through AXI-style interfaces, encoded in 512-bit frames like the weights. Here the state sits behind a simple 64-bit word port with one-clock reads and one write per clock. An AXI adapter with frame packing would sit outside the top.
- **No running maximum.** The exponentials do not subtract a running maximum. This relies on the Q8.8 range and the input clamp.
