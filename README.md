# Packing-prefetch scheduling core for long-context LLM inference

In the decode phase of LLM inference, each new token runs attention over the
request's whole KV-cache. That KV-cache lives in HBM, and it grows with the
context length. Decode attention therefore spends its time waiting for HBM,
while the matrix units sit idle. The linear layers of a decode step have the
same problem, but that part is solved by *packing*: a chunk of another
request's prefill is run in the same pass. The weights read from HBM then
serve hundreds of tokens, and the linear layers become compute-bound.

This design uses the HBM bandwidth that compute-bound packed linear layers
leave unused. While the matrix units work through a linear layer, the HBM
port streams the KV-cache of the *next* decode attention into a very large
on-chip prefetch buffer. The published configuration uses 512 MB of
monolithic-3D back-end-of-line memory stacked over the logic. By the time the
attention runs, its KV-cache is already on chip. The result is that every
stage of a packed iteration is compute-bound.

The RTL here is the control and memory side of one compute core:

- the request packer;
- the generator of the layer-by-layer operation stream;
- the scheduler that decides, beat by beat, what the HBM port fetches;
- the 80 MB double-buffered operand buffer;
- the 512 MB KV prefetch buffer.

The matrix and vector units and the HBM are outside the core and attach
through ports. Behavioural models of both are in `tb/`.

## The time line the hardware produces

One packed iteration runs all layers in order. Within one layer, the compute
units and the HBM port are busy like this:

```
compute : | Linear-pre (A,B,C) | Attn C (prefill) | Attn A | Attn B | Linear-post (A,B,C) | ...
HBM     : | weights pre  + KV(A,B) prefetch       |  rest of KV,    | weights post + KV(A,B) of
          |                                       |  if any         | the next layer, prefetched
```

A and B are requests in their decode phase; C contributes a prefill chunk.
The linear layers run over the tokens of all three, and their weights come
from HBM. Prefill attention of C runs over C's earlier chunks. Each decode
attention reads one request's KV-cache for this layer. Whatever part of that
KV-cache the prefetch did not reach in time is fetched when the attention's
turn comes. That is the short "rest of KV" slot in the diagram.

## The HBM arbitration rule

This is the heart of the design, in `rtl/prefetch_scheduler.sv`. Operations
arrive in execution order. The HBM operand of each operation (weights, or
KV-cache) is cut into *partitions* of at most one compute-buffer bank
(40 MB). Partition *p* is computed out of one bank while partition *p+1* is
fetched into the other. Every cycle, the one HBM read port goes to one user:

```
while compute of partition p is unfinished:
    if all beats of partition p+1 have been requested:
        if prefetch-buffer occupancy < M:
            request one KV beat for the next decode attention
    else:
        request one beat of partition p+1
```

The consequences:

- **Operand fetch always wins.** Prefetch can never delay the next
  computation. It only fills cycles the operand stream does not need. This
  happens once partition p+1 is in flight and partition p+2 has to wait for
  partition p's bank to free.
- **Prefetch only happens in compute-bound phases.** When the partitions
  compute faster than HBM delivers them, the operand stream uses every
  cycle, and nothing is prefetched. This matches the published observation
  that short prefill chunks leave too little bandwidth to prefetch.
- **M bounds the buffer.** `pf_limit` holds M in 1 KiB beats, from 0 up to
  524288 (512 MB). Space is reserved when a read is *issued*, so beats still
  in flight count against M. With M = 0 the core is a packing-only design.

### Look-ahead, and closing a prefetch

Prefetch needs to know the coming decode attentions before they execute.
When a decode-attention operation enters the scheduler's 64-entry operation
queue, its KV range (address and length) is also written into a look-ahead
table. Prefetch walks this table in order, one KV beat at a time.

The operand fetcher later reaches that attention itself and *closes* its
entry:

- The `sent` beats already requested stay in the prefetch buffer. They go to
  the compute units in the partition descriptor as `kv_onchip`.
- Only the remaining `length − sent` beats are fetched, as an ordinary
  operand partition.
- Prefetch moves on to the next entry. When the current layer's attentions
  are done, that is the next layer's attention, so the KV for layer *l+1* is
  prefetched while the post-attention linear layer of layer *l* and the
  pre-attention linear layer of layer *l+1* compute.

Prefetch and consumption run in the same order, so the prefetch buffer is a
ring. The compute units pop exactly `kv_onchip` beats per decode attention,
oldest first.

### When a partition may start

A partition is handed to the compute units (`cmp_valid`) when three things
hold:

1. all of its own beats have returned;
2. every KV beat prefetched for it has returned (the scheduler compares
   running request and return counts);
3. the previous partition has reported `cmp_done`.

`cmp_done` also frees the partition's bank, so the next partition can start
fetching into it. HBM returns must come back in request order. Each return
carries a tag saying which buffer, bank and word it goes to.

## Packed iterations and the operation stream

`rtl/request_packer.sv` keeps up to 32 requests. It builds one iteration at a
time:

- **Decode requests go first.** Every request in its decode phase is in every
  iteration.
- **One prefill chunk per iteration.** The oldest request still in prefill
  adds its next chunk of up to `chunk_tokens` tokens (512 or 1024 in the
  service-level runs).
- **After the iteration** (`iter_done`): each decode request has one more KV
  token and one output token fewer. The prefill request has advanced by its
  chunk. A request whose prompt is complete switches to decode, with exactly
  its prompt tokens in its KV-cache. A request that produced its last output
  token leaves and pulses `req_fin`.

`rtl/op_generator.sv` turns an iteration into operations, layer after layer.
Each layer gets: the pre-attention linear layers (QKV), the prefill-chunk
attention, one decode attention per decode request (lowest slot first), and
the post-attention linear layers (output projection and feed-forward).

The HBM layout is fixed by parameters:

- **Weights:** layer-major, starting at `W_BASE`.
- **KV-cache:** each request gets a region at its `req_kv_base`. Layer *l* of
  that region starts at `kv_base + l × cap × 4` beats, where `cap` is the
  prompt length plus the output length.

The defaults are Llama3.1-8B in FP16:

| quantity | size | beats (1 KiB) |
|---|---|---|
| QKV weights per layer | 4096 × 6144 × 2 B = 48 MiB | 49152 |
| O + FFN weights per layer | (4096² + 3·4096·14336) × 2 B = 368 MiB | 376832 |
| K and V per token per layer | 2 × 8 heads × 128 × 2 B = 4 KiB | 4 |
| one layer's KV at 128K tokens | 512 MB | 524288 = the prefetch buffer |

## Memories

- **`compute_buffer`** holds 80 MB as two banks of 40960 words of 1 KiB. It
  has one write port, taken by HBM returns, and one read port for the compute
  units. Reads have one cycle of latency. The scheduler never lets both ports
  use the same bank in a cycle.
- **`kv_prefetch_buffer`** holds 512 MB as 524288 words of 1 KiB, organised
  as a ring:
  - `resv` reserves the next word, and its index goes out in the HBM tag;
  - returns are written at their reserved index;
  - `rd_en` pops the oldest word, which appears on `rd_data` one cycle later;
  - `used` counts reserved words that have not yet been popped.

  In silicon this is gain-cell eDRAM built from oxide-semiconductor
  transistors in the back-end metal stack. The RTL describes only its logical
  behaviour.

## Interfaces of `ppsched_top`

All signals are synchronous to `clk`. `rst_n` is an active-low asynchronous
reset of all control state; the memory arrays are not reset.

| group | signals | protocol |
|---|---|---|
| configuration | `chunk_tokens`, `pf_limit` | levels, held during operation |
| requests | `req_valid/ready`, `req_prompt`, `req_out`, `req_kv_base`, `req_slot`; `req_fin` | valid/ready; the slot number is valid with ready; `req_fin` is a one-cycle pulse per slot |
| HBM | `hbm_req_valid/ready`, `hbm_req_addr`, `hbm_req_tag`; `hbm_rsp_valid`, `hbm_rsp_tag`, `hbm_rsp_data` | one beat per accepted cycle; a request not yet accepted may be withdrawn; responses come back in order and are always accepted |
| compute units | `cmp_valid/ready`, `cmp_part`; `cmp_done` | one partition at a time; `cmp_done` is a one-cycle pulse |
| buffer reads | `cb_rd_en/bank/addr` → `cb_rd_data`; `kv_rd_en` → `kv_rd_data` | one cycle of latency; `kv_rd_en` pops |
| status | `iter_done`, `perf` | `perf` counts operand beats, prefetch beats, cycles held at M, compute stall cycles, fully and partly prefetched decode attentions, and partitions |

A partition descriptor (`part_desc_t`) carries:

- the operation (kind, layer, request, token count, HBM range);
- the bank and the number of beats in it;
- `kv_onchip`: for the first partition of a decode attention, how many of its
  KV beats are waiting in the prefetch buffer. They come first in address
  order, followed by the beats in the bank.

## Where the numbers come from

| value | origin |
|---|---|
| 80 MB compute buffer, 512 MB prefetch buffer, 32 GB HBM, 1.64 TB/s | published TPUv6e-like configuration |
| 128×128×16 systolic arrays, 918 TFLOPS | published; used only in the compute model (512 beat-tokens per cycle) |
| 512 and 1024 token chunks; 32 concurrent decode requests | published service-level settings |
| scheduling rule, operand-fetch priority, limit M | published |
| order of operations within a layer | published time diagram |
| 1 KiB beat and word, 1.75 GHz clock | this design: 918 TFLOPS ÷ (2 × 128 × 128 × 16) = 1.75 GHz, and 1.64 TB/s ÷ 1.75 GHz ≈ 937 B per cycle |
| two banks, a partition of one bank, per-beat arbitration, ring buffer, queue depths 64 | this design |
| Llama3.1-8B layer sizes, HBM layout | public model configuration; layout is this design's |

## What is not here, and where it departs

- **Matrix units, vector units, HBM.** Only their sizes are known, so they
  are ports plus behavioural models:
  - `tb/compute_model.sv` consumes each partition and runs at the peak rate;
  - `tb/hbm_model.sv` has fixed latency and a 0.915 beat-per-cycle limit.
- **No write-back path.** The HBM port only reads. Operation outputs are
  assumed to stay on chip (operator fusion), and the K/V of each new token
  are not written back to HBM. A complete chip needs a write channel, with
  its own priority in the rule above; the published rule does not give one.
- **No tiling.** FlashAttention-style head tiling and the mapping search
  belong to the authors' software framework. Here each operation is one
  contiguous operand stream, cut into bank-sized partitions.
- **Prefetch stops when the compute units are idle.** Prefetch runs only
  while a partition computes, exactly as the published loop states. At the
  very end of the work, with nothing computing, nothing is prefetched.
- **Llama3.1-70B on the TPUv7-like part is not the default.** It needs
  `HBM_AW` raised to 28 bits in `ppsched_pkg` (about 140 GB of weights) and
  the 70B layer sizes in the op-generator parameters. Its KV-cache is also
  4 KiB per token per layer, so 128K tokens need 512 MB. The published 1 GB
  prefetch buffer for that configuration is therefore twice what one layer
  needs.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

| testbench | what it establishes |
|---|---|
| `tb_compute_buffer` | bank addressing, one-cycle reads, reading one bank while writing the other |
| `tb_kv_prefetch_buffer` | reservation order, out-of-order returns, in-order pops, occupancy with simultaneous reserve and pop, wrap-around |
| `tb_request_packer` | a hand-worked seven-iteration sequence: chunking, decode priority, prefill-to-decode hand-over, completion, slot reuse |
| `tb_op_generator` | the exact operation list for two layers under random back-pressure, including addresses |
| `tb_prefetch_scheduler` | the data seen by compute is correct; every beat is read once; full and partial prefetch; the limit M is reached; M = 0 disables prefetch; prefetch shortens the run |
| `tb_ppsched_top` | three requests to completion at reduced size, with M = full and M = 0; HBM traffic matches the traffic worked out from the iterations; every mechanism is counted and must occur |
| `tb_ppsched_full` | default sizes (80 MB / 512 MB / 32 layers) over three iterations, about 128 M cycles |
| `tb_workload_service` | default buffers and layer sizes, 2 layers: six long-prompt requests (summarisation-shaped lengths divided by 4) served to completion with M = 0 and M = 512 MB; same HBM traffic, earlier finish with prefetch |
| `tb_workload_packed_stage` | default buffers and layer sizes, 2 layers: a decode request with 8K tokens of KV packed with 1024- and 256-token prefill chunks, each with M = 0 and M = 512 MB |

In `tb_ppsched_full`, two requests with 2048-token prompts are run. The
second iteration packs request A's decode with request B's 2048-token
prefill chunk. All 32 of A's decode attentions find their 8 MB of KV fully
prefetched, and the iteration takes barely longer than the first iteration,
which has no decode at all. A 16-token iteration at the same size stays
HBM-bound and prefetches almost nothing. That is consistent with the rule
above.

`tb_workload_packed_stage` measures how the gain depends on the prefill
chunk. With 1024-token chunks the linear layers are compute-bound, the
whole 32 MB of KV per layer is prefetched, and the stage drops from
1939997 to 1884762 cycles. With 256-token chunks the linear layers are
HBM-bound. Idle bandwidth then appears only while a short remainder
partition is fetched under a full one. About half of the KV is
prefetched, and the stage drops only from 1073528 to 1036406 cycles.

`tb_workload_service` serves a whole batch. Both runs move exactly the same
19348216 HBM beats. With prefetch, 44 decode attentions find their KV on
chip and the batch ends after 30841819 cycles instead of 30990017. The
gain is small here because the prompts were shortened to keep the run
short, which makes the KV-caches short.

To simulate one testbench with Verilator 5 from the directory holding `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/ppsched_pkg.sv tb/tb_pkg.sv tb/tb_ppsched_top.sv --top-module tb_ppsched_top -o sim
./obj_dir/sim +verilator+rand+reset+2
```

The full-size testbench allocates about 600 MB for the two buffers and takes
about two minutes.

## Changing it

- **Buffer sizes** are parameters of `ppsched_top` (`BANK_WORDS`,
  `KV_WORDS`). The field widths in `ppsched_pkg` limit them to 2^17 words per
  bank and 2^20 prefetch words.
- **The model** is set by the op-generator parameters on the top (`N_LAYERS`,
  `W_PRE_BEATS`, `W_POST_BEATS`, `KV_BEATS_PER_TOK`).
- **The beat width** is `BEAT_BYTES` in the package. The HBM address width
  `HBM_AW` is in beats.
- **The arbitration rule** is the `always_comb` block of
  `prefetch_scheduler` that computes `grant_op` and `grant_pf`. Its
  assertions check the two published conditions on every cycle: no prefetch
  while operand beats are outstanding, and no reservation at or beyond M.
