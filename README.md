# TokenStack: an HBM-PIM stack that keeps hot KV next to compute

Serving a large language model spends most of each decode step on attention
over the key/value (KV) cache. That work needs bandwidth and little compute.
TokenStack splits an HBM stack vertically into two kinds of DRAM die:

- **Capacity layers**: dense dies for weights, activations and cold KV.
- **Compute layers**: dies with a small FP16 processing unit beside every
  bank. Attention over hot KV runs inside the memory here.

The CMOS base die under the stack becomes the stack's own memory controller.
It moves KV blocks between the two kinds of layer without the host. It
quantizes blocks as they go down and restores them as they come up, and it
decides which blocks to push down.

This repository is RTL for the logic of one such stack: the base-die
functions plus the PIM banks of the compute layers. The DRAM dies, the
PHYs and the host are outside the RTL. They appear as ports, and as
behavioural models in the testbenches.

## Block map

```
 host link (cmd / rsp)                                capacity-layer word port
        │                                                        ▲
 ┌──────┴──────────────────── tokenstack_top ───────────────────┼──────┐
 │  command decode ─┬─► attention_coordinator ◄──► pim_bank × B  │      │
 │                  ├─► kv_directory (translation + metadata)    │      │
 │                  │        │            │                      │      │
 │                  │   eviction_engine  replica_gate            │      │
 │                  │        │ background       │ replica event  │      │
 │                  ├─► fg queue ─┐  bg queue ◄─┘                │      │
 │                  │             ▼                              │      │
 │                  │        migration_dma ── page_buffer        │      │
 │                  │             │  └─ k8v4_quant               │      │
 │                  └─ GPU rd/wr ─┴──► mc_arbiter ───────────────┘      │
 └──────────────────────────────────────────────────────────────────────┘
```

| module | role |
|---|---|
| `ts_fp16_pkg` | FP16 type and bit-level multiply / add |
| `ts_pkg` | sizes, layout functions, command / response / metadata types |
| `pim_bank` | one compute-layer bank: K rows, V columns, q registers, one FP16 MAC |
| `attention_coordinator` | broadcasts q and a, starts the banks, gathers s and o |
| `kv_directory` | logical block → compute slot, per-slot metadata |
| `migration_dma` | page-at-a-time promotion and demotion |
| `page_buffer` | one page of FP16 K and V (T_page × d × 4 bytes) |
| `k8v4_quant` | FP16 → INT8 Keys / INT4 Values and back |
| `mc_arbiter` | separate GPU and DMA queues toward the capacity layers |
| `eviction_engine` | demotes blocks between the high and low water marks |
| `replica_gate` | three-gate test for blocks worth a copy on another card |
| `sync_fifo` | helper queue |
| `tokenstack_top` | one stack, wiring all of the above |

Default sizes:

| parameter | value | meaning |
|---|---|---|
| `D` | 128 | head dimension d |
| `B` | 256 | PIM banks in the compute layers |
| `L_MAX` | 8192 | tokens of one head group the compute layers hold |
| `T_PAGE` | 16 | tokens per page |
| `BLOCK_PAGES` | 4 | pages per block, so 64 tokens per block and 128 compute slots |
| `B_CAP` | 32 | capacity banks that pages interleave over |
| `QGROUP` | 32 | elements per quantization group |
| `NBLOCKS` | 1024 | logical blocks the directory tracks |

The head dimension and bank count come from the published design. The window,
page, block and group sizes are this implementation's choice.

## Where K and V live in the banks

The layout removes any reduction across banks in both attention phases:

- **Keys are token-major.** Token n's whole Key row goes to bank `n mod B`, at
  row `n div B`. For the score phase `s = q·Kᵀ`, each bank computes the scores
  of its own tokens with no help from other banks: ⌈L/B⌉ dot products of
  length d.
- **Values are dimension-major.** Dimension j of every token goes to bank
  `j mod B`, column `j div B`. For the context phase `o = a·V`, each bank
  computes ⌈d/B⌉ output elements, each a sum over all L tokens.

The base die builds s and o by concatenation. It reads one result per cycle
from the bank that owns it, so collecting a decode step's results costs
L + d cycles.

With B = 256 and d = 128, banks 128..255 own no Value column. In the context
phase they finish each a_n at once.

### The PIM unit and its FP16 rules

Each `pim_bank` holds q in a register file and has one FP16 multiplier and
one FP16 adder. It does one multiply-accumulate per cycle:

- **Score:** the bank walks its rows. Each row takes d cycles.
- **Context:** the coordinator puts a_n on a broadcast bus. A bank with k
  columns does k − 1 MACs, then waits with `a_ready` high. When every bank is
  ready, the coordinator raises `a_take`. All banks then do their last MAC
  for a_n together and move on to a_(n+1). The bus therefore advances in
  lock-step with the slowest bank. At the defaults that is one token per
  cycle.

The arithmetic is simple FP16:

- subnormal inputs and results are treated as zero;
- results round toward zero;
- overflow goes to infinity;
- NaN is not handled.

The adder aligns both operands into a 42-bit fixed-point sum, so no bits are
lost before the final truncation. The testbench reference uses real
arithmetic (exact in double precision for one FP16 operation) followed by
truncation. It is bit-exact against the RTL.

Accumulation order is part of the result:

- scores: k = 0..d−1;
- outputs: n = 0..L−1.

## Moving blocks between layers

A logical block is `BLOCK_PAGES` pages of `T_PAGE` tokens of one head group.
In the compute layers, a block sits in a **slot**: slot s holds context
tokens s·64 … s·64+63. In the capacity layers, each block id owns a fixed
**frame**. Page p of a block goes to capacity bank `p mod B_CAP`, so a block's
pages spread over banks and their TSV bandwidth adds up. Word w of page p of
block k is at address

    ((k · ⌈BLOCK_PAGES/B_CAP⌉) + p div B_CAP) · PAGE_WORDS + w.

`migration_dma` handles one page at a time. It goes through `page_buffer`,
which holds one page of FP16 K and V.

**Demotion** (compute → capacity), per page:

1. **Gather.** Read the page's Keys (from bank n mod B) and Values (from bank
   j mod B) into the buffer, one element per cycle. On the way, keep the
   largest FP16 exponent of every group.
2. **Write.** Write 64-bit words to the capacity bank:
   - the group exponents;
   - the INT8 Keys, 8 per word;
   - the INT4 Values, 16 per word.

   The `k8v4_quant` lanes quantize the data on the way out.

**Promotion** (capacity → compute), per page:

1. **Read.** Read the words back, dequantize them and fill the buffer.
2. **Scatter.** Write each element to its bank.

The Value transpose happens between the buffer and the banks. The buffer is
token-first, like a capacity page. The banks are dimension-first. The scatter
simply walks buffer addresses in token order and turns each into a bank
address.

At the defaults a page is 400 words (16 exponent words, 256 Key words and
128 Value words), against 1024 words in FP16: 2.56×, which is the 2.67× of
K8V4 less the group exponents.

Cycles per page, with no back-pressure:

| direction | cycles |
|---|---|
| demotion | 2·T_page·d + 1 = 4097 gather, then 2 per word (800) |
| promotion | 400 read plus the capacity latency, then 4097 scatter |

### The K8V4 rule

The published design fixes the widths: 8-bit Keys and 4-bit Values. It does
not fix the quantizer. This one is symmetric, with a power-of-two scale per
group. For a group whose largest exponent is E, an element with exponent e
and 11-bit significand m becomes:

- a Key: `q = m >> (E − e + 4)`, a signed INT8 with step 2^(E−21);
- a Value: `q = m >> (E − e + 8)`, a signed INT4 with step 2^(E−17).

Codes truncate toward zero. Dequantization is exact, since it only multiplies
by a power of two. The group's exponent byte is the scale, so no
floating-point divide or multiply is needed in either direction.

## The directory and the metadata behind the policies

`kv_directory` maps each logical block id either to a compute slot or to its
capacity frame. The host only ever names blocks, so it never sees a
migration.

For each compute slot, the directory keeps this record:

- category w (API, text, code, thinking);
- last-access time t_last;
- prompt-position offset;
- remote-hit count;
- an 8-bit card mask, whose popcount is the number of distinct cards that hit
  the block;
- valid, pending-demotion and replica-requested flags.

The record is 12 bytes.

A TOUCH command records an access. A remote touch also counts a remote hit
and adds the requesting card to the mask.

### Eviction

`eviction_engine` watches occupancy (valid, not pending slots):

- When occupancy rises above `theta_hi`, the engine starts demoting.
- It keeps demoting until occupancy is at or below `theta_lo`.

Each round:

1. **Scan.** Walk all slots, one per cycle, and find each category's oldest
   block.
2. **Score.** Give each candidate a reuse estimate:

       ReuseProb = F_w(Δt + ℓ_w) − F_w(Δt),   Δt = now − t_last

   F_w is a 64-entry CDF table per category, indexed by `time >> T_SHIFT`.
   ℓ_w is the category's lifespan. The host fits both and loads them.
3. **Pick.** Choose the candidate with the lowest reuse. Break ties by the
   deepest offset, then by the fewest remote hits.
4. **Issue.** Hand the demotion to the background queue.

A round takes NSLOT + 3 cycles.

The published algorithm writes the score as the tuple
(−ReuseProb, +offset, −n_remote) and takes its lexicographic *minimum*.
Taken literally, that demotes the block *most* likely to be reused. The
accompanying prose asks for the opposite: low reuse first, deep positions
first, and protection for blocks that many remote cards hit. This RTL
implements the prose.

The published design keeps per-category queues sorted by t_last. This RTL
instead finds each queue's front by scanning. That is simpler, and it costs
NSLOT cycles per demotion.

### Replication

After every remote hit, `replica_gate` tests the block's record. A block
passes when all three gates hold:

- **position:** offset ≤ τ_off;
- **fan-out:** the number of distinct cards > τ_cards;
- **frequency:** remote hits > τ_hits.

A block that passes is reported once on the response channel (`RSP_REPL`).
Copying it to another card's replica reserve crosses cards, so it is left to
the host.

## Foreground and background migration

Promotions come from the host (`PROMOTE`) and go into a **foreground** queue.
Demotions come from the host (`DEMOTE`) or from eviction and go into a
**background** queue.

The DMA always takes a waiting promotion before a waiting demotion. A
demotion that is already running finishes first. The `n_fg_first` counter
counts the times both queues were waiting and the promotion won.

The capacity port is shared by DMA traffic and plain GPU reads and writes
(`GPU_RD` / `GPU_WR`). `mc_arbiter` keeps the two sources in separate queues
and alternates between them whenever both have requests. Capacity reads
return in order, and a tag queue sends each response back to its source. GPU
reads are limited to what the GPU response queue can hold, so a stalled host
never loses data.

## Host interface

One command channel and one response channel, both valid/ready, stand in for
the die-to-die link. Every command is a `host_cmd_t`:

| op | fields | effect |
|---|---|---|
| `CFG` | slot = selector, idx, data | F table entry, lifespan, water marks, replica thresholds |
| `KV_WRITE` | slot = token n, idx = j, is_v, data | write one FP16 K or V element; waits while a promotion writes the banks |
| `ALLOC` | block, slot, cat, offset | declare a block resident in a slot |
| `TOUCH` | block, is_v = remote, card | record an access; replies with `RSP_TOUCH` {slot, hit} |
| `PROMOTE` | block, slot, cat, offset | foreground move into a free slot; `RSP_DONE` when finished |
| `DEMOTE` | block | background move to the capacity frame; `RSP_DONE` when finished |
| `Q_WRITE` | idx = j, data | broadcast q_j |
| `SCORE` | idx = L | returns L `RSP_SCORE` {n, s_n} |
| `CONTEXT` | idx = L, then L × `A_DATA` | returns d `RSP_OUT` {j, o_j} |
| `GPU_RD` / `GPU_WR` | bank, addr, data | plain capacity-layer word access, `RSP_GPU` |

Responses leave in this priority order: attention results, GPU read data,
command replies, migration-done events, replica events.

The host must follow three rules:

- The target slot of a promotion must be free.
- The target slot must not be inside the window of a running attention
  operation.
- The softmax between `SCORE` and `CONTEXT` is the host's job.

## Where this RTL departs from the published design

- **No page overlap.** The published pipeline overlaps reading one page with
  transposing the previous one. Here the two steps of a page run one after
  the other, so each page's capacity read time adds to its scatter time.
- **Element-serial bank access.** Migration moves one element per cycle. The
  published quantizer is sized to keep up with 896 GB/s of TSV bandwidth;
  this one is not.
- **One layout.** Only the token-major-K / dimension-major-V layout is built.
  The alternative layouts, and switching between them by context length, are
  not.
- **One PIM unit per bank.** The published unit diagram shares one unit
  between an even and an odd bank, while the layout figure gives every bank
  its own. This RTL follows the layout figure.
- **Eviction score.** As above, the prose ordering is used, not the literal
  minimum. Queue fronts are found by scanning.
- **Migration classes.** Promotions are foreground and demotions background,
  as the text says. One figure's legend labels them the other way round.
- **Not modelled.** DRAM array timing, the TSV and die-to-die PHYs,
  multi-stack and multi-card forwarding, replica copies, and all
  runtime-software policies: scheduling, admission, home assignment and CDF
  fitting.

## Workload fit

The evaluation uses four models (4 B to 175 B parameters) and four request
traces. Mean context per request ranges from 910 tokens (short API calls) to
7185 tokens (long reasoning). Every model has head dimension 128 or less.
One stack instance holds a full 8192-token window of one head group, so every
mean request fits.

Requests much longer than the mean would need a larger `L_MAX`. Capacity for
whole models is a node-level question outside this RTL: FP16 KV per token
ranges from 0.15 MB for the 4 B model to 4.7 MB for the 175 B model.

## Simulating

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. The reference models are independent of the
RTL:

- `ts_ref_pkg`: real-valued FP16 arithmetic and the K8V4 quantizer;
- `cap_layer_model`: capacity dies with fixed latency and random
  back-pressure.

For example:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
        rtl/ts_fp16_pkg.sv rtl/ts_pkg.sv tb/ts_ref_pkg.sv \
        tb/tb_tokenstack_top.sv --top-module tb_tokenstack_top -Mdir obj
    ./obj/Vtb_tokenstack_top +verilator+rand+reset+2

What the testbenches cover:

- **`tb_tokenstack_top`** runs the whole stack end to end at reduced sizes
  (d = 32, 4 banks, a 64-token window, 8 slots). It checks scores and
  outputs bit-exactly before and after blocks move. It also drives:
  - a demotion with GPU traffic alongside;
  - a touch that misses;
  - a promotion with a KV write that must wait;
  - a promotion that overtakes a queued demotion;
  - a replica event;
  - eviction down to the low water mark.

  It fails if any of these never happens.
- **`tb_tokenstack_full`** runs the top at its default sizes: 256 banks,
  d = 128 and an 8192-token window. It writes one block, runs both attention
  phases, demotes the block, promotes it into another slot, and checks both
  phases again over 128 tokens. The build takes about six minutes. The run
  takes seconds.
- **The block testbenches** override parameters to stay small. Where this
  design defines a cycle count, they check it: round length in eviction, and
  page timing in the DMA.
