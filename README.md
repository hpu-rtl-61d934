# HPU processing unit: attention offload engine in SystemVerilog

## Design idea

In the generation stage of an LLM, attention does very little arithmetic for
each byte it reads. Every new token reads the whole key and value cache of its
sequence once. It does only a few multiply-adds per cached element. A GPU has
far more compute than this needs, but too little memory bandwidth and
capacity. The HPU moves that part elsewhere. It is a card with its own HBM that
holds the KV cache and computes attention. The GPU keeps the dense,
compute-bound layers (QKV projection, output projection, FFN).

This RTL is the HPU's processing unit. It is one narrow datapath that streams
the cache out of HBM at one 64-byte block per cycle for keys and one for
values. It spends just enough arithmetic on each block to keep up:

* G query heads of a grouped-query-attention (GQA) group share one key/value
  head. Each 64-byte block fetched (32 FP16 elements) therefore feeds
  G × 32 multiply-adds.
* At the default G = 8 that is 8 FLOP per byte of HBM traffic. This is the
  compute-to-bandwidth ratio the HPU is designed around.
* With G = 1 the same unit is a multi-head-attention engine at 1 FLOP per byte.
  That is the ratio of the FPGA prototype.

## Block diagram

```
 host stream ──► parser ──┬──► query buffer ──► Q·K ──► Find Max ──► Softmax ──► S·V ──► result buffer ──► host
 (64 B beats)             │                     ▲                                 ▲
                          │ KV writes           │ keys                            │ values
                          ▼                     │                                 │
                    interconnect ◄──────── DMA key reader              DMA value reader
                    (64-byte interleave)
                     │   │   │   │
                    HBM ports 0..3 (HBM controllers, outside this RTL)
```

| File | Block |
|---|---|
| `rtl/hpu_pkg.sv` | Sizes, types, and the FP16/FP32 arithmetic functions |
| `rtl/hpu_fifo.sv` | Helper queue used by the buffers |
| `rtl/hpu_parser.sv` | Splits host entries. Writes the new key and value to HBM. Passes command and queries on. Counts 256-head chunks |
| `rtl/hpu_query_buf.sv` | Queue of parsed commands and queries |
| `rtl/hpu_interconnect.sv` | Maps 64-byte blocks onto HBM ports. Arbitrates three requesters. Returns read data in order |
| `rtl/hpu_dma.sv`, `rtl/hpu_kv_reader.sv` | Key and value read engines with their buffers |
| `rtl/hpu_qk_unit.sv` | Scaled dot products of G queries with every key, into the score buffer |
| `rtl/hpu_find_max.sv` | Per-query-head maximum. Copies the scores to its own buffer |
| `rtl/hpu_softmax.sv` | exp(s − max), the sum, the reciprocal, normalisation |
| `rtl/hpu_sv_unit.sv` | Weighted sum of the value vectors |
| `rtl/hpu_result_buf.sv` | Result queue. Sends 64-byte beats tagged with the command's tag |
| `rtl/hpu_top.sv` | The processing unit |

## Host entry and memory layout

The host sends one entry per KV head in a stream of 64-byte beats:

1. One command beat. Its low 128 bits hold `{tag[31:0], seq_len[31:0], kv_base[63:0]}`:
   * `seq_len` is the number of tokens already cached.
   * `kv_base` is the byte address of the head's cache region.
   * `tag` comes back with the result.
2. G·HEAD_DIM·2/64 query beats (G × 4 at HEAD_DIM = 128).
3. Four beats for the new key.
4. Four beats for the new value.

The parser writes the new key and value into the cache at position `seq_len`.
Only after HBM has accepted those writes does it hand the command and queries
to the query buffer. Reads for the head therefore always see them. Attention
then covers L = seq_len + 1 tokens.

A head's cache region is 2·SEQ_CAP·HEAD_DIM·2 bytes:

* Key t is at `kv_base + t·256`.
* Value t is at `kv_base + SEQ_CAP·256 + t·256`.

Consecutive 64-byte blocks go to consecutive HBM ports:

* The port is address bits [7:6].
* The port-local address is the byte address with those two bits removed.

A streamed key or value vector therefore touches all four ports. Streaming
through the cache spreads evenly over them.

The parser pulses `chunk_done` after every 256 entries. That is the size of the
host's bulk transfers.

## Pipeline and timing

Each attention stage holds a whole head in a buffer and hands it to the next
stage through a valid/release pair:

* Valid means "a complete head is in my buffer".
* Release means "I have read it, you may overwrite it".

Stage times for a head of L tokens, once data flows:

| Stage | Cycles | Rate | Buffer |
|---|---|---|---|
| Q·K | 4·L | one key block per cycle | 2 banks of SEQ_CAP scores |
| Find Max | L + 1 | one token per cycle | 1 bank, a copy of the scores |
| Softmax | 2·L + 2 | exp pass, reciprocal, normalise pass | 2 banks of SEQ_CAP weights |
| S·V | 4·L | one value block per cycle | accumulators only |

Q·K and S·V are the slow stages, since both read a 64-byte block per cycle.
The two-bank buffers are there so that they never wait for each other:

* Without a second Softmax bank, Softmax could start a head only after S·V had
  finished reading the previous one. S·V would then idle for 2L cycles per
  head.
* In the same way, Q·K would idle for L cycles while Find Max copied its
  scores.

With the banks, the unit completes one head every 4·L cycles in steady state.
HBM reads then run at 128 bytes per cycle: 64 for keys and 64 for values.
A single head goes through the pipeline in about 11·L cycles.
On eight heads of 1K to 2K tokens, with the memory never stalling, the run
takes 7·L of the first head plus 4·L for each head, within a few percent.
That is 78 % of the two read streams, counting the fill.

* The key and value readers keep up to 16 blocks in flight. They never issue
  more than their 16-entry buffers can take.
* This covers a memory round trip of about 16 cycles at full rate.
* HBM back-pressure and a slow host only stall the pipeline. They never lose
  data.

Every handshake is valid/ready. Reset is asynchronous and active low.

## Arithmetic

Inputs and outputs are IEEE binary16. Inside, the unit uses binary32:

* Products are added in a 32-lane adder tree. The result is accumulated over
  the four blocks of a vector (Q·K) or over the tokens (S·V).
* Rounding is by truncation.
* Subnormals flush to zero. Overflow saturates. There is no Inf or NaN.
* exp(x) = 2^(x·log2 e), split into 2^n · p(f). p is a cubic on [0, 1) with
  relative error below 2·10⁻⁴.
* The reciprocal of the sum is a mantissa division.
* The score scale is 1/√128 as a binary32 constant.

Against attention computed in double precision from the same FP16 inputs, the
results agree to within 4·10⁻³·(1 + |x|). This includes the final rounding to
FP16.

## Parameters

| Parameter | Default | Where the number comes from |
|---|---|---|
| `D` (HEAD_DIM) | 128 | Head dimension of the design |
| Interleave block | 64 bytes | Design |
| `G` | 8 | Largest GQA group of the HPU; 1 gives the MHA prototype |
| `NCH` | 4 | One port per HBM controller (four stacks) |
| `CHUNK` | 256 | Heads per host transfer |
| `SEQ_CAP` | 2048 | Own choice: the 2K-token context of the evaluation workload |
| `KVBUF` | 16 | Own choice: covers the memory round trip |
| `QDEPTH`, `RDEPTH` | 2 | Own choice |
| Address width | 38 bits | Own choice: holds 144 GB |

## What this RTL leaves out

* **PCIe endpoint with QDMA, HBM controllers, HBM stacks.** These are
  bought-in parts. The top brings out their user-side streams as ports. The
  testbenches use a behavioural HBM model. It answers in order after a fixed
  latency and stalls randomly.
* **Host software and the GPU side.** Head- or batch-parallel placement across
  several HPUs and sub-batch overlap with the GPU all happen in software. A
  single unit just sees heads.
* **Long contexts.** Sequences of tens of thousands of tokens would need the
  intermediate score buffers offloaded to reserved HBM. Here they are on-chip
  and limited to SEQ_CAP tokens.
* **Full rate.** The full HPU targets 4.9 TB/s and 39.3 TFLOPS. This is one
  pipeline at 128 bytes per cycle. Neither a clock nor a number of parallel
  units is fixed. At 500 MHz, one pipeline moves 64 GB/s. Reaching the target
  would take many such pipelines side by side, each serving its own heads.
  That replication is not built.

## Workloads

The evaluation workload is Llama 2 7B with a 2K context (1K prompt, 1K
generated) at batch 8 to 64:

* Model shape: 32 layers, 32 heads of 128.
* It uses multi-head attention, so every query head has its own KV head.

| Question | Answer for this workload |
|---|---|
| Head size | Matches `D` = 128 |
| Context length | 2048 tokens fits SEQ_CAP exactly |
| Cache per sequence | 2 × 32 × 32 × 2048 × 128 × 2 B = 1 GB. Batch 64 needs 64 GB, within the 144 GB of the full HPU and the 38-bit address |
| Prototype split | 16 GB per unit holds about 16 sequences, so batch 64 needs four units |
| MHA at default G = 8 | Functionally supported but wasteful: the host fills one query slot per entry and ignores the other seven outputs, so 1/8 of the multipliers are used |
| MHA at G = 1 | Every multiplier is used |

## Simulation

Every block has a self-checking testbench in `tb/`. Each prints one line,
`TB_RESULT checks=N failures=M`, and ends with `$finish`. There is a watchdog.

| Testbench | What it covers |
|---|---|
| `tb_hpu_top` | The whole unit at reduced size: G = 2, 64-token buffers, 4-head chunks, 8 heads. Checks every output element against real-arithmetic attention. Checks that the new key and value reached the cache. Counts each mechanism: interleaved reads on every port, back-pressure, overlapping stages, chunk completion |
| `tb_hpu_top_mha` | The same test with G = 1, the multi-head-attention build |
| `tb_hpu_top_full` | The same test with the top at its default sizes: G = 8, 2048 tokens, 256 heads in one chunk |
| `tb_hpu_decode_llama` | Also at default sizes. One decode step of a Llama-2-7B-shaped layer: MHA heads padded into the 8-query engine, 8 heads at 1K–2K cached tokens, one at 2048. Checks the results and the throughput |

With Verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/hpu_pkg.sv tb/tb_fp_pkg.sv \
    -y rtl -y tb tb/tb_hpu_top.sv --top-module tb_hpu_top
./obj_dir/Vtb_hpu_top +verilator+rand+reset+2
```
