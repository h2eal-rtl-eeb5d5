# Hybrid sparse attention on a hybrid-bonded logic die

When an LLM decodes a long context, every new token has to read the whole
KV cache of every attention head. At 256k tokens that read dominates
decoding time and energy. In a hybrid-bonded (HB) accelerator the DRAM dies are
bonded directly on top of the logic die. Each logic bank then sees a private,
wide and short path to the DRAM bank above it, so bandwidth is high as long
as each bank works on the data stored above it.

This RTL implements the attention side of such a logic die. Two ideas cut the
KV traffic and keep the banks busy:

* **Hybrid sparse attention.** Heads are split, offline, into two kinds:
  * *Streaming heads* attend only to a few *sink* tokens (the first tokens of
    the sequence) and to the most recent *local* tokens. Their cost is fixed.
  * *Retrieval heads* also attend to sink and local tokens. In addition, for
    every query they pick the *k* most relevant pages of older tokens. A page
    is 32 consecutive tokens, summarised by the element-wise minimum and
    maximum of its keys. When the page budget is full, the page with the
    lowest accumulated importance is evicted.
* **Load sharing inside tiles.** A retrieval head costs far more than a
  streaming head. Banks are therefore grouped into *tiles* of one
  retrieval-head bank plus up to three streaming-head banks. The tokens of
  each retrieval page are spread evenly over the tile's banks. Each bank both
  stores and computes its share of tokens. The partial softmax results are
  merged over the on-chip network.

The die has 16 logic banks on a 4x4 mesh. Each bank runs one head.

## Block map

```
h2eal_top
├── noc_mesh (4x4)
│   └── noc_router x16          5-port, X-then-Y, 256-bit flits
└── logic_bank x16              one head per bank, own memory-die port
    ├── sink_token_mem          first N_SINK tokens (K,V)
    ├── kv_window_fifo          most recent WIN tokens (K,V)
    ├── page_minmax             page metadata: element-wise min / max of keys
    ├── importance_table        accumulated score per stored page, victim scan
    ├── relevance_unit          max(q.min, q.max) per page
    ├── topk_select             k best pages of a selection pass
    └── attn_pe                 online-softmax attention, partial-state merge
h2eal_pkg                       constants, flit format, fixed-point helpers
```

The sink tokens, the window FIFO, the min/max units, the importance scores
and the PE sit on the logic die. The metadata, the pages and the older local
tokens live in the DRAM bank above.

Default parameters (in `h2eal_pkg`):

| name | default | meaning |
|---|---|---|
| `HEAD_DIM` | 128 | head dimension, int8 lanes |
| `PAGE` | 32 | tokens per page |
| `TOPK` | 128 | selected pages per query (4k tokens) |
| `MAX_PAGES` | 8192 | page budget of a retrieval head (256k tokens) |
| `N_SINK` | 4 | sink tokens |
| `WIN_DEPTH` | 64 | local tokens kept on the logic die |
| `LOC_PAGES` | 6 | older local pages of a streaming head kept in DRAM (192 tokens) |
| `SEL_INTERVAL` | 3 | queries that share one selection |
| `TILE_MAX` | 4 | banks per tile |
| `MESH_X`, `MESH_Y` | 4, 4 | mesh size |
| `BEAT_W` | 256 | width of a DRAM beat and of a NoC flit payload |

Sources of these values:

* Taken from the description this design follows: page size, top-k length,
  shared selection, tile size, mesh, and the 256-bit memory and network width.
* Chosen here: head dimension (that of the 7B/8B models evaluated), sink count,
  window depth, local pages and budget.

## The life of a token in a bank

The host gives each bank one command per token through a valid/ready
handshake on `cmd_*`. `OP_APPEND` adds the token to the cache (prefill).
`OP_DECODE` adds the token and then attends with its query.

1. **Sink and window.** The first `N_SINK` tokens go to the sink memory and
   every later token to the window FIFO.
2. **Page formation.** When the FIFO is full, its oldest `PAGE` tokens are
   popped as one page:
   * *Streaming head.* The page goes into a ring of `LOC_PAGES` pages in DRAM.
     The oldest page in the ring is overwritten, which is how the oldest local
     tokens are discarded.
   * *Retrieval head.* The keys pass through `page_minmax`. The page's
     `(min, max)` record is written to the metadata area. The tokens are
     written interleaved over the tile (next section). The new page's
     importance starts at 0.
3. **Eviction.** If all `MAX_PAGES` slots are in use, `importance_table` first
   scans for the slot with the lowest score. The new page replaces that slot,
   and the shared selection is invalidated.
4. **Selection** (retrieval head, on `OP_DECODE`). A selection pass runs when
   no valid selection exists, or when the current one has already served
   `SEL_INTERVAL` queries. During a pass:
   * every metadata record streams from DRAM through `relevance_unit`;
   * each score is added to the page's importance;
   * each score is offered to `topk_select`.

   The queries in between reuse the stored list of page ids. The
   accumulate-then-evict policy means pages that keep scoring low for many
   queries are the ones discarded.
5. **Attention.** The PE sweeps over three sets of tokens:
   * the sink tokens;
   * the window tokens;
   * the tokens in DRAM: for a retrieval head, its own share of the selected
     pages; for a streaming head, the local ring.

   The result is normalised and sent out one int8 lane per cycle on
   `out_valid/out_idx/out_val`. `out_done` ends the step.

## Tiles: interleaved storage and computing where the data is

This is the least obvious part of the design.

A tile is given statically per bank:
* `cfg_tile_lg` sets the tile size `T = 2^cfg_tile_lg` (1, 2 or 4);
* `cfg_member[0..T-1]` lists the tile's bank ids, with entry 0 being the
  retrieval-head bank (the *owner*);
* `cfg_is_ret` marks the owner.

All members of a tile get the same member list. Choosing which banks form a
tile is an offline placement problem: heads of each kind should end up close
together on the mesh. The hardware only follows the configuration.

**Storage.** Token `j` of a retrieval page (j = 0..31) belongs to member
`j mod T`. It lands at position `j div T` of that member's slice of the page
slot. The owner keeps its own tokens. It sends the others as `F_KV` flits,
one flit per 256-bit beat, with the DRAM address in the flit's `aux` field.
The receiving bank writes them to its own DRAM from a small input FIFO when
it is idle. Every page is thus spread evenly over the tile, whichever pages
are later selected. The metadata stays with the owner.

**Computation.** On a decode step the owner sends the query (`F_Q` flits)
and the selected page ids (`F_SEL` flits, 16 ids per flit) to each member.
Each member:

* finishes its own head's current command;
* attends over its slice of each selected page;
* holds the resulting partial softmax state: the running maximum `m`, the
  denominator `l` and the D weighted value sums `o`.

After its own sweep, the owner asks the members one at a time with `F_GO`.
Each member answers with one `F_ML` flit and `D/4` `F_O` flits. The owner's
PE merges each answer in the FlashAttention way:

```
m' = max(m, m_r);   l' = l*2^(m-m') + l_r*2^(m_r-m');   o' = o*2^(m-m') + o_r*2^(m_r-m')
```

The owner normalises only after the last member has been merged. A token's
K/V never crosses the network at attention time. Only one query and one
partial state per member do.

Message types, in the `ftype` field of `h2eal_pkg::flit_t`:

| type | from → to | payload |
|---|---|---|
| `F_KV` | owner → member | one K or V beat; `aux` = DRAM address |
| `F_Q` | owner → member | one beat of the query; `aux` = beat index |
| `F_SEL` | owner → member | up to 16 page ids; `aux` = {count, flit index} |
| `F_GO` | owner → member | empty: send your partial now |
| `F_ML` | member → owner | `m` and `l` |
| `F_O` | member → owner | four 64-bit lanes of `o`; `aux` = first lane |

A bank accepts `F_ML` and `F_O` only while it is merging. Other flits stay in
the network until it does, so back-pressure, not buffering, absorbs the
timing differences between banks.

## Numbers inside the PE

Keys, values, queries and outputs are int8. The fixed point is this design's
own choice:

* **Logits.** `q.k` is computed exactly in 32 bits. It is then multiplied by
  `SCORE_MUL = 33`, which approximates `log2(e)/sqrt(128)` in Q.8. The logit
  is therefore in base-2 units with 8 fraction bits, and softmax weights
  become powers of two.
* **Weights.** `2^-d` for `d = n + f/256` is approximated as
  `2^-n * (1 - f/2)` in Q.16 (`h2eal_pkg::exp2_neg`). Its largest error is
  about 6% at `f` near 0.5.
* **Accumulators.** `l` is 40 bits (Q.16). Each `o` lane is 48 bits. Both are
  rescaled by the same factor whenever the running maximum grows.
* **Normalisation.** `o/l` is a divider used one lane per cycle. The result is
  rounded toward zero and saturated to int8.

The reference model in `tb/h2eal_ref_pkg.sv` uses real arithmetic with the
same logit scale. The tests accept ±4 LSB per output lane.

## Interfaces and timing

* **Memory port (one per bank).**
  * A request is `mem_req_valid/ready` with `we`, a word address and 256-bit
    write data.
  * Reads return in order on `mem_rsp_valid/rdata`, after any latency.
  * The bank has no ready signal on the response; it always takes it.
  * Word layout: metadata (`2*D/32` words per page slot), then page slices,
    then the streaming ring.
* **Host port.** Valid/ready per token. `cmd_ready` is low while the bank is
  busy, including while it serves its tile.
* **Throughput.**
  * Everything streams one 256-bit beat per cycle unless back-pressured. A
    128-lane token is 8 beats (4 key, 4 value).
  * A selection pass over `n` pages takes `8n` cycles plus the memory latency.
  * Normalisation takes `D` cycles.
  * The mesh adds one cycle per hop. An idle network delivers a flit to the
    local bank one cycle after injection.
* **Event counters.** `st_*` counts page pops, evictions, selection passes,
  reused selections, KV beats sent to other banks, partials served to an owner,
  and stall cycles.

## How far this follows the description it is based on

Followed:
* the split into streaming and retrieval heads;
* sink plus local tokens for both kinds of head;
* page metadata as element-wise min/max of keys, and the relevance score
  `max(q.min, q.max)`;
* top-k selection shared by nearby queries;
* importance accumulation and lowest-score eviction;
* the on-die placement of sink tokens, window FIFO, min/max units and scores;
* pages and metadata on the memory die;
* interleaving of page tokens over the banks of a tile;
* computing where the data is stored, with a FlashAttention-style merge;
* a 4x4 mesh with 256-bit links.

Choices of this design, where the description gives only the function:
* all fixed-point formats;
* the top-k circuit, an insertion sorter;
* the victim search, a sequential scan;
* the router (X-then-Y, 2-flit buffers, round robin);
* the message protocol and the DRAM layout;
* a selection interval of exactly 3 queries, read from an example;
* the relevance score as the quantity accumulated into importance. The
  description also speaks of accumulating the attention score. The relevance
  score was used because it exists for every stored page.

Known differences and limits:
* **Tile size.** It must be a power of two (1, 2, 4), because the member of
  token `j` is `j mod T`. A tile of three banks, which the description shows
  in one balancing example, has to run as a tile of 2 or 4.
* **One head per bank.** A bank holds the state of one head. Running the many
  heads and layers of a full model needs the bank to be re-used per head:
  per-head base addresses plus saving and restoring the sink, window and
  importance state. That is not built.
* **Offline steps.** Head classification (a trained gate per head), the
  mapping of heads to banks and the choice of tiles are offline steps. They
  enter the RTL only through the `cfg_*` inputs.
* **Not built.** The GEMM engine for the linear layers (compute-in-memory
  macros) is not built. Neither are the DRAM banks, their refresh and the
  bonding interface. The testbenches use a behavioural DRAM bank
  (`tb/hb_dram_model.sv`) with fixed latency and random back-pressure.
* **Selection cost.** Selection reads every stored page's metadata. At the
  full 8192-page budget a pass takes about 65k cycles per head, and
  `SEL_INTERVAL` amortises it.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`. Each has a watchdog. With verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/h2eal_pkg.sv tb/h2eal_ref_pkg.sv tb/hb_dram_model.sv \
  rtl/*.sv tb/tb_h2eal_top.sv --top-module tb_h2eal_top -o sim
./obj_dir/sim
```

(List `rtl/h2eal_pkg.sv` only once. Replace the testbench file and top
module for the other tests.)

| testbench | what it shows |
|---|---|
| `tb_kv_window_fifo` | queue model, age reads, full/empty, drain in DEPTH cycles |
| `tb_page_minmax` | min/max per page with gaps and clears, result 1 cycle after the page |
| `tb_sink_token_mem` | only the first N_SINK tokens kept, clear |
| `tb_importance_table` | saturating accumulate, overwrite, victim scan and its cycle count |
| `tb_relevance_unit` | score and tag per page, back-to-back pages at one beat per cycle |
| `tb_topk_select` | top-k with ties against a sorted-list model |
| `tb_attn_pe` | 1- and 24-token attention against real arithmetic; a merge of two partial states; D-cycle normalisation |
| `tb_noc_router` | X-then-Y port choice, per-flow order, no loss under random back-pressure, 1 flit/cycle |
| `tb_noc_mesh` | all-to-all delivery and order, latency per hop |
| `tb_logic_bank` | one retrieval bank and one streaming bank against the reference model, with selection-pass cycle counts |
| `tb_h2eal_top` | end to end: 16 banks, 4 tiles of 4, every output against the reference model, every mechanism counted |
| `tb_h2eal_full` | the same at every default parameter (head dim 128, 8192-page budget, top-128) |

`tb_h2eal_top` runs reduced sizes: D=32, 4-token pages, a 4-page budget and
top-2. This makes eviction and selection reuse happen within 40 tokens. It
counts a failure if any of the following never happens:
* a page pop;
* an eviction;
* a selection pass;
* a reuse of a selection;
* an interleaved KV store;
* a partial result served to an owner;
* a memory stall.

`tb_h2eal_full` covers one prefill (68 tokens, enough for the first page) and
8 decode steps at the defaults. It cannot reach eviction, which needs more
than 8192 pages per head.
