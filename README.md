# Near-storage attention accelerator

Long-context LLM inference that runs offline, in large batches, spends most of
its decoding time in attention over a KV cache. That cache is far too large for
GPU memory, so it is kept on SSDs. If the host pulls the cache over PCIe at
every decoding step, the link becomes the bottleneck. This design moves the
attention computation next to the storage. Each storage device has an FPGA
and a private DRAM. The device reads its part of the KV cache from its own
SSD into that DRAM, and the accelerator here computes

    out = softmax(q · Kᵀ / √d) · V

for one KV head. Only the query rows go into the device, and only the output
rows come back out. The cache never crosses the host link.

The accelerator is *temporal*: it does not hold a whole score vector on chip.
It processes the context in blocks of 128 tokens. Four units form a block
pipeline, and intermediate results pass between them through the device DRAM.
On-chip storage therefore does not depend on the context length. The maximum
context is set only by DRAM capacity and by the 20-bit length fields, which
allow up to 1,048,575 tokens.

This repository holds synthesizable SystemVerilog for that accelerator,
self-checking testbenches for every unit, and end-to-end tests. The
surrounding system is not RTL and is not included here: the SSD, the
on-board DRAM and its controller, the PCIe fabric, and the host runtime that
schedules work and buffers new KV entries. The top module exposes their
connections as plain ports.

## The job: one KV head, one decoding step

A job is the attention of one KV head for one new token. It covers `DGROUP`
query heads that share that KV head: one for ordinary multi-head attention,
four or five for grouped-query attention. The job is given as an
`attn_job_t` struct (`rtl/hilos_pkg.sv`):

| field | meaning |
|---|---|
| `q_addr` | `DGROUP` query rows, 4 words each (128 FP16 values) |
| `k_addr`, `v_addr` | key / value rows, token-major, 4 words per token |
| `qk_addr` | scratch region for the scaled scores QKᵀ/√d, FP16 |
| `sc_addr` | scratch region for the attention probabilities, FP16 |
| `out_addr` | `DGROUP` output rows, 4 words each, FP16 |
| `stored_len` | tokens whose keys are already in DRAM |
| `valid_len` | `stored_len` + tokens whose keys are still held by the host (≤ 16 more) |

Layout rules:

- All addresses count 512-bit words. One word holds 32 FP16 values, and the
  26-bit address covers a 4 GiB DRAM.
- The block count is `nb = ceil(valid_len / 128)`.
- In the two scratch regions, query row `g` starts at `base + g·nb·4`.
- The host rounds the K and V regions up to whole blocks, so they hold `nb·128` rows.
- Rows past `valid_len` may hold anything: they are masked.
- Value rows of the host-buffered tokens must be in DRAM right after the
  stored value rows.

The head dimension is fixed at 128. A model with a smaller head, such as 112,
is run by zero-padding q, K and V up to 128 columns. This changes neither the
dot products nor the useful output columns.

## The block pipeline and its dependencies

This is the part of the design that takes the most care. Each unit walks the
blocks in order. `attn_ctrl` coordinates the units with two counters and one
start pulse:

```
 qk_unit ──QKᵀ block b──▶ DRAM ──▶ softmax_stats        (waits until qk_avail > b)
                                     │ global max m, sum Z after the last block
                                     ▼
                   DRAM ◀── softmax_norm  (starts once all statistics are final)
                    │ score block b
                    ▼
                  sv_unit              (waits until sc_avail > b)
```

- **qk_unit and softmax_stats overlap.** The statistics of block *b* are
  computed while the query-key unit loads and multiplies block *b+1*. The
  statistics unit needs about 100 cycles per block. The query-key unit needs
  about 800, so the statistics unit spends most of its time waiting.
- **Normalisation cannot start early.** Every probability needs the final
  global max and sum. Normalisation is therefore a second pass over the
  stored scores, which starts only after the last block's statistics. This
  is the one true barrier in the job.
- **Normalisation and score-value overlap.** `sv_unit` starts at the
  beginning of the job and waits on `sc_avail`. It takes block *b* as soon as
  the normalisation unit has written it, so reading V for block *b* overlaps
  with normalising block *b+1*.
- **A job ends** when `sv_unit` has written the output rows. `done` pulses and
  `last_cycles` holds the job's length. Jobs do not overlap: `job_ready` stays
  low while a job runs.

Approximate per-block cost in cycles, without DRAM stalls (`D` = `DGROUP`):

| unit | per block |
|---|---|
| qk_unit | 512 key reads + 128 transpose + 128 MAC + 4·D writes |
| softmax_stats | 4·D reads + 32 max + 64 exp/sum + 1 update |
| softmax_norm | 4·D reads + 64 exp/divide + 4·D writes |
| sv_unit | 4·D + 512 reads + 128 MAC |

The first and last units dominate. Measured timings:

- With a stall-free DRAM of 8-cycle latency, a `DGROUP=1` job settles at
  about 1,440 cycles per block. A 128K-token context (1,024 blocks) takes
  1.48 M cycles, or about 5 ms per head per decoding step at 296 MHz.
- With a DRAM model that stalls at random, 3 blocks at `DGROUP=1` take about
  5,600 cycles.
- With the same stalling model, 8 blocks at `DGROUP=5` take about 15,200
  cycles.

Inside a unit, the phases of a block run one after another. For example,
`qk_unit` does not load the next key block while the MACs run. Overlapping
those phases would be the first speed-up to add.

## Softmax in two passes

A plain softmax needs three sweeps over the scores: one for the maximum, one
for the sum of exponentials, and one to normalise. The design folds the first
two into a single pass. It keeps a running (max `m`, sum `Z`) pair and merges
each block into it:

```
for each block b:                       softmax_stats
    m_b = max(x in b)                   4-input max tree, 4 elements/cycle
    s_b = Σ exp(x − m_b)                2 EXP lanes + adder, 2 elements/cycle
    if m_b > m:  Z = Z·exp(m − m_b) + s_b ; m = m_b      (stream_update)
    else:        Z = Z + s_b·exp(m_b − m)
for each element:                       softmax_norm
    p = exp(x − m) / Z                  2 EXP + 2 dividers per query row
```

The exponentials of block *b* use the block's own maximum, not the global one.
The global maximum is not known yet, but the arguments still stay ≤ 0 and
cannot overflow. The streaming update then rescales whichever of the two sums
belongs to the smaller maximum. `stream_update` uses a single exponential for
both branches.

Both passes read scores through `mask_unit`, which overrides a position in
two cases:

- A position at or past `valid_len` is padding and becomes −10⁴. Its
  exponential is then zero in FP32.
- A position in `[stored_len, valid_len)` belongs to a token whose key is not
  in DRAM yet. It takes the host-supplied score from the host scalar buffer
  (next section).

## Newest tokens: host-supplied scores

Writing each new KV entry (256 bytes per head) to an SSD right away would
mean many tiny writes. So the host keeps the newest tokens' keys and values
in its own memory. It spills them to storage every 16 steps.

Until a token is spilled, the host computes that token's score itself and
hands the accelerator the value q·k/√d, already scaled, as FP32. It does
this through the `hs_*` ports:

- Each write sets `host_sc[hs_g][hs_idx]`.
- Entry `i` of query row `g` stands for token `stored_len + i`.

The buffer holds `HBUF = 16` entries per query row, which matches the
16-step spill interval. An index past `HBUF` is treated as padding. The
buffer resets to the padding value.

## Query-key unit and online transpose

Keys are stored token-major: one 128-element row per token. That is the only
layout that suits appending one token per step to an SSD. A dot product per
token would need all 128 multipliers of a query row to reduce to a single
value. The unit instead works on the transposed block. It loads a 128×128
key block into K-Buf, and `online_transpose` copies K-Buf into K^T-Buf in 128
cycles, one row per cycle. The MAC array then runs for 128 cycles:

- In cycle *d*, K^T row *d* holds element *d* of all 128 keys.
- That row is broadcast to `DGROUP × 128` FP32 MACs.
- MAC *j* of query row *g* adds `q[g][d] · K[j][d]`.

After 128 cycles each MAC holds one token's score. The scores are scaled by
1/√128, rounded to FP16 and written to the QKᵀ region. The transpose is local
to a block, so the keys never need a second, transposed copy in storage.

## Score-value unit and grouped-query sharing

Values need no transpose. In cycle *j*, value row *j* (token *j*) is broadcast
to the MACs, and MAC *d* of query row *g* adds `p[g][j] · V[j][d]`. The
accumulators (ACC) keep their sums across all blocks of the job. After the
last block they are rounded to FP16 and written out.

In both GEMV units, one buffered K or V row feeds the MACs of every query row
in the group. With `DGROUP = 5`, a block's keys and values are therefore read
from DRAM once for five query heads, not five times. `tb_hilos_attn_gqa`
checks this by counting the K/V words read: 1,024 per block. A `DGROUP = 1`
build can still run a GQA model by issuing one job per query head, but it
then reads the shared cache once per head.

## Number formats

Everything in DRAM is IEEE FP16. All arithmetic is FP32: products,
accumulations, exponentials, max and sum, and division. The operators are
plain combinational functions in `hilos_pkg`.

FP32 rules:

- Results are truncated, not rounded to nearest.
- FP32 denormals are flushed to zero.
- Overflow saturates to infinity.
- NaN is never produced.

Conversion rules:

- FP16→FP32 and FP32→FP16 handle FP16 subnormals exactly.
- FP32→FP16 rounds to nearest. Small attention probabilities fall into the
  FP16 subnormal range, so exact subnormals matter there.

The exponential (`fp32_exp_unit`) works as follows:

- It rewrites eˣ as 2^(x·log₂e).
- The integer part of the exponent goes into the result's exponent field.
- A 16-entry table of 2^(k/16), whose constants are written in the package,
  covers the top fraction bits. A cubic series covers the rest.
- The relative error is below 10⁻⁵. Arguments below −128 return zero.

These choices are simple rather than IEEE-exact. They are adequate here
because every exponent argument is ≤ 0 and the tolerances of the tests are at
FP16 level.

## Sharing the DRAM port

All four units read DRAM and three of them write it, through one 512-bit port
(`mem_arbiter`). The arbiter does three things:

- It grants reads round-robin.
- It keeps a FIFO of requester tags, so that in-order read data can be
  steered back to the unit that asked. The data is broadcast and only the
  valid strobe is steered.
- It grants writes round-robin on a separate channel.

Up to `MAX_OUT = 64` reads may be outstanding. Inside the accelerator, each
unit talks to the arbiter through the `mem_rd_if` and `mem_wr_if`
interfaces. Their rules:

- A request completes on `valid && ready`.
- Responses come back in order and cannot be stalled.

## Parameters of `hilos_attn_top`

| parameter | default | meaning |
|---|---|---|
| `DGROUP` | 1 | query heads per KV head (builds with 4 and 5 also exist; the 5 build is tested) |
| `HBUF` | 16 | host scalar entries per query row = spill interval |
| `EXP_PAR` | 2 | exponential lanes per query row in each softmax pass |
| `MAX_PAR` | 4 | inputs of the max tree |
| `MAX_OUT` | 64 | outstanding DRAM reads |

The intended clock is about 300 MHz. The RTL has no timing constraints, and
the combinational FP operators would need pipelining to reach that clock in
most technologies.

## Where this RTL departs from, or adds to, the original design

- **Followed from the original design:**
  - the four units and their buffer names;
  - 128-token blocks and the 128×128 local key transpose;
  - the two-pass softmax with its streaming update;
  - masking with −10⁴ and host-precomputed scores for unspilled tokens;
  - FP16 storage with FP32 arithmetic, 512-bit words of 32 elements;
  - two exponential lanes and four-way max reduction;
  - 128 MACs per query row, broadcast K/V rows for grouped queries;
  - spill interval 16.
- **Own choices, where the design gives only the function:**
  - the exponential algorithm and the FP operators (truncation, flushing
    FP32 denormals);
  - the place of the 1/√d scaling (query-key unit, before rounding);
  - the scratch-region layout in DRAM and the job struct;
  - round-robin DRAM arbitration;
  - the adder tree width of two, matching the two exponentials per cycle;
  - the host scalars taken as FP32 and pre-scaled;
  - a full divider rather than a reciprocal.
- **Simplified:**
  - In the original dataflow, the query enters the query-key unit directly
    from the host, and the result leaves the score-value unit directly. Here
    both pass through device DRAM (`q_addr`, `out_addr`). The host transfers
    the same data; it just lands in, or is fetched from, DRAM.
  - Phases inside a unit do not overlap.
  - One job runs at a time.
  - FP operators are combinational, with no pipeline registers, so the clock
    target is not met as written.
  - The reduction "tree of depth four" is read as a four-input, two-level
    tree.
- **Not included:** the SSD, the DRAM and its controller, the PCIe switch and
  shell, and all host software. That host software covers KV buffering and
  spilling, the split between GPU-side and storage-side caches, and
  scheduling.

## Files

`rtl/`:

- `hilos_pkg.sv`: types, job struct, FP16/FP32 operators
- `mem_rd_if.sv`, `mem_wr_if.sv`: unit-to-arbiter interfaces
- `fp32_exp_unit.sv`: exponential lanes
- `mask_unit.sv`: padding and host-score masking
- `reduce_tree.sv`: max/sum tree
- `stream_update.sv`: running max/sum merge
- `softmax_stats.sv`: softmax pass 1
- `softmax_norm.sv`: softmax pass 2
- `online_transpose.sv`: K-Buf → K^T-Buf
- `qk_unit.sv`: query-key product
- `sv_unit.sv`: score-value product
- `mem_arbiter.sv`: DRAM port sharing
- `attn_ctrl.sv`: job and block dependencies
- `hilos_attn_top.sv`: top level

`tb/`:

- `tb_pkg.sv`: FP16/FP32 ↔ real helpers and a tolerance compare
- `dram_model.sv`: fixed-latency DRAM model with optional random back-pressure
- One `tb_<module>.sv` per unit.
- `tb_hilos_attn_top.sv`: three jobs end to end at default parameters. It
  counts these mechanisms:
  - padding;
  - host scores;
  - max raised and max kept;
  - units waiting on each other;
  - DRAM stalls;
  - port contention.
- `tb_hilos_attn_gqa.sv`: a 5-query group over 1,010 tokens, with the KV-read count.
- `tb_hilos_attn_long.sv`: one 128K-token step at default parameters. It uses
  a 112-wide head zero-padded to 128, and a few dominant keys that make the
  running maximum move.

Every testbench prints `TB_RESULT checks=N failures=M` and has a cycle
watchdog. Expected values come from real-number reference models in the
testbench. Where the design rounds to FP16, the reference rounds at the same
points.

## Simulating

Verilator 5 with timing support:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_hilos_attn_top \
  rtl/hilos_pkg.sv tb/tb_pkg.sv rtl/mem_rd_if.sv rtl/mem_wr_if.sv \
  rtl/fp32_exp_unit.sv rtl/mask_unit.sv rtl/reduce_tree.sv rtl/stream_update.sv \
  rtl/softmax_stats.sv rtl/softmax_norm.sv rtl/online_transpose.sv rtl/qk_unit.sv \
  rtl/sv_unit.sv rtl/mem_arbiter.sv rtl/attn_ctrl.sv rtl/hilos_attn_top.sv \
  tb/dram_model.sv tb/tb_hilos_attn_top.sv
./obj_dir/Vtb_hilos_attn_top
```

List the packages first. Swap the last file and `--top-module` to run another
testbench. Each one finishes in well under a minute.
