# Hummingbird: a DSP-lean LLM decode core in SystemVerilog

## The design idea

Token-by-token LLM decoding on a small FPGA is limited by memory bandwidth and
by how many DSP slices the GEMV datapath needs. This core addresses both:

- **Almost every adder lives in DSP slices.** The GEMV engine is 32 cascaded
  chains of four multiply-accumulate DSPs, which gives 128 lanes. The
  cascade's registers do the bookkeeping:
  - A1 prefetches the next activations while A2 holds the current ones.
  - The P cascade carries partial sums down the chain.
  - The same chain also runs the transposed (AXPY) product in place, using the
    D port for the scalar and the P cascade for offload.

  The 32 chain outputs are reduced by a tree of six-input adders. Each of
  those is three cascaded DSP adders, so little fabric logic remains.
- **Memory traffic is shaped to the DRAM.** Every transfer is cut at 16 KB
  column boundaries. Each piece is then split into four equal parts, one per
  128-bit HP port, and the returned beats are merged into one 512-bit word.
- **The GQA attention order is rearranged** so that the K cache and V cache of
  a group are never on chip together:
  - One 4096 x 128 x 8-bit buffer holds K, and later the same buffer holds V.
  - The four query heads of a group share the buffer.
  - Softmax outputs wait in a small score buffer between the two phases.

The core runs the attention block of one decoder layer for one new token:
RMSNorm, K/V/Q projections with RoPE, the scores, an online softmax, the
score x V product and the output projection. With link enabled, the
output-projection partials are all-reduced with a partner core.

## Block map

| Part | Files |
|---|---|
| Vector processing unit (VPU) | `dsp_mac_chain`, `dsp_add_chain6`, `adder_tree`, `ring_accumulator`, `gemv_engine`, `weight_unpack`, `activation_buffer`, `kv_buffer`, `score_buffer` |
| Memory management unit (MMU) | `mmu`, `cmd_split`, `axi_read_port`, `port_merge` |
| Scalar processing unit (SPU) | `spu`, `spu_convert`, `spu_quant`, `spu_rope`, `spu_softmax`, `spu_rmsnorm`, `spu_silu`, `fp16_pkg` |
| Dataflow control unit (DCU) | `dcu`, plus the operation decoder in `hummingbird_top` |
| Host and multi-core side | `embedding_buffer`, `interconnect_link` |
| Shared types | `hb_pkg` |

Number formats:

- Activations are INT24.
- Weights are INT4 and the kv cache is INT8. Both travel as 8-bit lanes
  inside the engine.
- Accumulators are 48 bits.
- Everything in the SPU is FP16.

## VPU: the DSP MAC chain and the GEMV engine (the hard part)

### One chain (`dsp_mac_chain`)

Four slices, indexed k = 0..3. Each slice has these registers:

- the A1/A2 activation pair;
- a pre-adder output register (AD);
- a D register for the AXPY scalar;
- a C register for the AXPY bias;
- the multiplier and its P register.

Control and weights enter slice 0 and move one slice per cycle, so slice k
acts on a command k cycles after slice 0. This is the usual systolic skew of a
DSP cascade.

**DOT mode** (y = W·x, one row per cycle):

- Activations shift through A1 (`act_shift`), one per cycle, four cycles per
  column block.
- `act_lock` copies all four A1 registers into A2 at once.
- AD loads from A2 with the skew, so each slice multiplies its locked
  activation by the weight arriving with the command.
- P accumulates down the cascade. The last slice therefore produces the
  four-term dot product for that row, four cycles after issue. `dot_valid`
  marks it.
- Because A1 and A2 are separate, the next block's activations are
  prefetched while the current block is used. The engine therefore issues one
  row per cycle without gaps.

**AXPY mode** (y += s·w, where s is a scalar and w a column of the matrix):

- The scalar is loaded into D, and the pre-adder output takes D instead of A2.
- Each slice multiplies its own weight lane by the shared scalar.
- The result accumulates in its own P register: `AXPY_FIRST` starts from C,
  `AXPY_ACC` adds to P.
- `OFFLOAD` then shifts the four P values down the P cascade, one per cycle.
  This is the path DOT uses for its sum, but now it only passes values.

**Direct feedback.** While results are offloaded, `fb_sel` lets A1 take the
offloaded value instead of a new activation. The value is shifted right by
`fb_shift` and saturated to 24 bits. A following DOT can then consume an AXPY
result without a trip through the SPU. The attention uses this: the S x V
output feeds the output projection directly.

### Reduction

- `dsp_add_chain6` is three DSP adders in a cascade, each computing
  C + A:B + PCIN. It adds six inputs in three cycles. Its input register
  depths (0/0/0, 1/1/1, 2/2/1) and its one 48-bit fabric register line the
  inputs up with the cascade.
- `adder_tree` uses six of these chains, then one, to reduce 32 inputs in six
  cycles. Unused inputs are tied to zero.
- `ring_accumulator` adds the per-block tree output for four interleaved rows,
  using a four-register ring and a single adder. A `first` tag clears the
  partial sum and a `last` tag emits it.

### GEMV engine (`gemv_engine`)

The engine wraps 32 chains, the tree and the ring.

**DOT command.** The fields are `ngroups` (rows / 4) and `ncb` (columns / 128).

- It visits row groups in the outer loop and column blocks in the inner loop.
- Each column block takes four cycles (four rows), and its activations are
  prefetched during the previous block.
- With a single column block, which is the case of the QK product and of the
  fed-back O projection, the activations are locked once and reused for every
  row.
- Row tags travel with the result through the chain latency (4), the tree (6)
  and the ring.

**AXPY command.** The field is `nvec`.

- Each cycle takes one scalar and one 128-lane weight vector.
- Per-chain offload returns 32 x 48-bit values per cycle, one lane of every
  chain, with `axpy_lane` saying which.
- The optional bias stream preloads C.
- When the next command has `use_fb`, the offloaded values are fed back into
  A1.

**Streams.** Weights (`w_*`), activations (`act_*`), AXPY scalars (`sc_*`) and
bias (`bias_*`) are valid/ready streams. The engine stalls issue whenever an
operand is missing. Results leave on `out_*` or `axpy_*` without
backpressure, one per cycle.

### Buffers next to the engine

**`activation_buffer`** holds up to 14336 INT24 elements in 32 banks.

- Element e sits in bank (e mod 128)/4, so a DOT read delivers one word per
  chain per cycle.
- Within a bank, the word order inside a column block is reversed to match
  the order in which A1 shifts.
- A DOT sequence starts at `dot_base`. An AXPY sequence reads single elements
  as scalars.

**`weight_unpack`** turns a 512-bit word into 128 signed lanes.

- With 4-bit weights, one word gives one vector (nibble l is lane l).
- With 8-bit values, two words give one vector.

**`kv_buffer`** is 4096 rows x 128 x 8 bits.

- It is filled from the bus at two words per row.
- One new row can be written directly, and the first n rows can be replayed
  as 128-lane vectors.

**`score_buffer`** is 4 heads x 4096 INT24 scores.

- Scores are written by the SPU and replayed per head as AXPY scalars.

## MMU: column-aligned access over four ports

**`cmd_split`**

- Cuts a (byte address, length) transfer at every 16 KB column boundary.
  Each transaction is column-aligned, and its byte count never exceeds one
  column.
- Divides each transaction into four equal contiguous parts, one per port.
- Issues the four sub-commands together, so the four ports always work on the
  same DRAM column.

**`axi_read_port`**

- Turns a sub-command into AXI read bursts of at most 256 beats that never
  cross a 4 KB page.
- Tracks outstanding bursts and forwards R beats.

**`port_merge`**

- Keeps a 32-deep FIFO per port and emits a 512-bit word when all four have
  a beat. Port p supplies bits 128p..128p+127.
- This absorbs the order in which the DRAM controller serves the ports.

**`mmu`** combines these parts.

- Each read command carries a destination: the VPU weight stream, or the kv
  buffer (replayed later).
- The kv buffer's direct row write stores the new token's K or V row.
- A write-back request sends that row out on the `wb_*` stream with its
  logical DRAM address.

## SPU: FP16 scalar processing

`spu` takes one accumulator value per cycle and applies these stages in
order:

1. **`spu_convert`**: INT48 x FP16 scale → FP16. It rounds to nearest,
   saturates at ±65504 and flushes subnormals.
2. **The post operation**, one of:
   - none;
   - **`spu_rope`**: rotates element i with element i+64 of the same head.
     Elements 0..63 are held until their partners arrive. cos and sin come
     from the parameter stream.
   - **`spu_softmax`**: online softmax. A single pass keeps the running
     maximum and the rescaled sum of exponentials. A second pass over the
     stored inputs writes exp(x − max)/sum. exp is 2^(x·log2 e), with a cubic
     polynomial on the fraction.
   - **`spu_silu`**: x·sigmoid(x) in fixed point.
3. **`spu_quant`**: FP16 x FP16 scale → INT24 activation or INT8 kv value. It
   forms the exact product, rounds to nearest and saturates.

**`spu_rmsnorm`** is on the embedding path.

- It reads the FP16 embedding and accumulates the sum of squares.
- It takes an integer square root (bit-serial) and divides.
- It then multiplies by the per-element gain from the parameter stream.

The result is quantized into the activation buffer.

Results carry their element index (`out_idx`). The top uses the index to
address the activation buffer, the kv row register or the score buffer.

## DCU and the decoder in the top

### Operation order

`dcu` steps through this order for every kv group g:

```
NORM (first group only)
LOADK KPROJ VPROJ Q0 Q1 QK0 Q2 QK1 Q3 QK2 QK3
LOADV SV0 O0 SV1 O1 SV2 O2 SV3 O3
```

- The QK product of head i starts as soon as Q(i) is ready. It overlaps the
  projection of Q(i+1) in the order, but not in time (see Gaps).
- Only one of K and V is ever in the kv buffer.
- Each score × V result is consumed at once by the O projection of the same
  head.

### Operation decoder (`hummingbird_top`)

The decoder moves through five states: launch → issue → run → finish.

- **Launch** sets up the memory reads and the SPU for the operation.
- **Issue** starts the GEMV.
- **Run** waits until the engine, MMU and SPU have been quiet for four cycles
  and the SPU has produced every expected element.

What each operation does:

| Operation | What happens |
|---|---|
| NORM | Drains the embedding FIFO through RMSNorm into the activation buffer at offset 0. |
| LOADK / LOADV | Fill the kv buffer with the `pos` cached rows of group g. |
| KPROJ | DOT over HIDDEN with RoPE. The INT8 result is written into kv buffer row `pos` and sent to write-back. |
| VPROJ | DOT without RoPE. The INT8 row is held in a register and written into the kv buffer after LOADV, then sent to write-back. |
| Q(i) | DOT with RoPE. Stored as INT24 at activation offset HIDDEN + 128i. |
| QK(i) | DOT of the kv buffer (pos+1 rows) against Q(i) with one column block. The result goes through the softmax into the score buffer. |
| SV(i) | AXPY: scores of head i are the scalars, kv buffer rows are the vectors. Offloaded and fed back. |
| O(i) | DOT of the Wo slice of head i against the fed-back vector. Goes through the interconnect link (when enabled) and the SPU, then out on `o_*`. |

### DRAM layout

Addresses are in weight bytes (INT4 packed two per byte).

| Data | Address |
|---|---|
| Wq of head h | `wq_base + h·64·HIDDEN` |
| Wk, Wv of group g | `wk_base` / `wv_base + g·64·HIDDEN` |
| Wo of head h | `wo_base + h·64·HIDDEN` |
| K / V cache of group g, token t | `kc_base` / `vc_base + g·128·TOKENS + 128t` |

**Weight order.** Each 512-bit word holds the 128 rows of one 4-row x
128-column block slice. The order is row group, then column block, then row
in group. Lane l of a word is output row 128c + l.

**Wo order.** The stream for head h is ordered so that row r = 4g + i and lane
l is Wo[r][128h + l].

**Parameter stream.** It delivers HIDDEN RMSNorm gains first. Then it delivers
64 (cos, sin) pairs for each RoPE operation, in this order: KPROJ, Q0, Q1, Q2,
Q3.

**Scales.**

- FP16 dequantization scales for each kind of operation are configuration
  inputs (`scl_q/k/v/qk/o`).
- So are the quantization scales for activations, kv values and scores
  (`qs_act/kv/score`).
- The O projection's dequantization scale includes `fb_shift`.

## Host side and tensor parallelism

**`embedding_buffer`**

- A FIFO of 4096 FP16 values. The host writes it directly, eight values per
  128-bit write, into its own address region, without going through DRAM.
- It is read one value per cycle by the RMSNorm.

**`interconnect_link`**

- Sends every local partial sum (`tx_*`), queues the partner's values
  (`rx_*`) and emits their sum.
- There is no flow control toward the partner, so both cores must run in
  lockstep. A 64-deep FIFO absorbs skew, and `overflow` reports a partner that
  runs too far ahead.
- When disabled, it passes the local values through.

## Verification

Every block has a self-checking testbench `tb/tb_<block>.sv`.

- Each one compares the block against a behavioural model and counts checks
  and failures.
- Each ends with a `TB_RESULT checks=… failures=…` line and has a watchdog.

**Top-level testbench.** `tb_hummingbird_top` runs the core at full size
(HIDDEN 4096, TOKENS 4096, GROUP 4).

- The test runs one group at token position 5, with the interconnect link
  enabled.
- A behavioural DDR answers four AXI read ports.
- The link partner echoes the core's own partials.
- The testbench checks every O output against a closed-form expectation.
- It counts that each mechanism was exercised the expected number of times:
  kv fill and replay, RMSNorm, RoPE, Q projection, softmax, AXPY, feedback
  DOT, link traffic, write-back, use of all four ports, and a drained
  parameter stream.

**Fault runs.** For each block, a copy with one deliberate fault was run
against its testbench. Every copy was detected with a non-zero failure count.

**Running a testbench with Verilator**, for example:

```
verilator --binary --timing --assert -Irtl rtl/hb_pkg.sv rtl/fp16_pkg.sv \
    $(ls rtl/*.sv | grep -v _pkg) tb/tb_hummingbird_top.sv --top-module tb_hummingbird_top
./obj_dir/Vtb_hummingbird_top
```

## Differences from the reference design and known gaps

**Scope**

- Only the attention half of a decoder layer is sequenced. The MLP
  (gate/up/down projections with SiLU and the element-wise product) is not
  sequenced. The residual adds, final norm and LM head are also missing.
  SiLU exists in the SPU and is tested on its own.
- The output projection of each head leaves as a per-head partial. Summing
  over heads and layers is left outside.

**Timing**

- Operations run one after another: each drains before the next starts. The
  overlap of projection and attention that the rearranged GQA order allows is
  therefore not exploited, and throughput is lower than the reference.

**Numerics and parameters**

- The reference text names LayerNorm; RMSNorm is built because the LLaMA
  models it targets use RMSNorm.
- RoPE cos/sin values and norm gains arrive on a parameter stream, and scales
  are configuration inputs. The MMU does not fetch them from DRAM.

**Memory interface**

- kv write-back is a plain row stream with a logical address, not an AXI
  write channel.
- The 8-bit unpack mode exists but the top does not use it, because kv data
  reaches the engine from the on-chip kv buffer.
- The DDR address mapping printed for the four ports is the DRAM
  controller's business. Here each port simply gets a contiguous quarter of
  each column-aligned transaction.

**Multi-core**

- Only two-core tensor parallelism is supported (one link partner). Four
  cores would need a reduction over several links.

**Not built.** The processor system, its DDR controller, the DRAM chips, the
SD card and the vendor memory controller. The core reaches them through its
AXI read ports, write-back stream and embedding write port.
