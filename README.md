# Two-stage retrieval accelerator for on-device RAG

A wearable medical assistant that uses retrieval-augmented generation keeps
the user's private records on the device as embedding vectors. Every query
has to be compared with every stored document embedding to find the few most
similar ones. The arithmetic is cheap. What costs time and energy is moving
the embeddings from DRAM to the chip. This accelerator reduces that traffic
with two retrieval stages:

1. **Approximate stage.** Only the upper 4 bits of every INT8 document entry
   are read and scored. This produces a candidate set of the 50 best
   documents.
2. **Exact stage.** Only those 50 candidates are read again, now with all
   8 bits, and re-ranked by their exact INT8 similarity.

This only pays off if DRAM can return the upper 4 bits without the lower 4.
So documents are stored **bit-planar**: one 512-bit DRAM row holds one bit of
all 512 entries of a document. The approximate stage reads 4 of a document's
8 rows. On collections of a few thousand documents this halves DRAM traffic
and cuts multiply work to about a quarter. The final ranking is the one a
full INT8 search would give on the candidates. The query stays in the
processing elements for the whole search (query-stationary dataflow), and
only documents stream through.

The RTL is SystemVerilog 2017 and synthesizable. The external DRAM and the
embedding model that turns text into vectors are outside the design; the
testbenches model the DRAM.

## Block diagram

```
 query words ──► query_buffer ──────────────────────► 4 × pe (query registers)
      │                                                  ▲
      └──► similarity_calculator (query norm)            │ 128 nibbles / cycle
                                                         │
 DRAM row (512 b) ─┬─► sram_buffer[0] ─► plane_gather[0] ─► pe[0] ─┐
   one bit-plane   ├─► sram_buffer[1] ─► plane_gather[1] ─► pe[1] ─┤ 4 × MAC<15:0>
                   ├─► sram_buffer[2] ─► plane_gather[2] ─► pe[2] ─┤
                   └─► sram_buffer[3] ─► plane_gather[3] ─► pe[3] ─┘
                                                                   ▼
 DRAM norm ||D|| ─► controller queue ─► PE tag ──► similarity_calculator
                                                  Σ Q·D ,  ||Q||·||D||
                                                                   ▼
                                                  result FIFO ─► rerank
                                                                   │ insert
                                      similarity_buffer ◄──────────┤
                                      chunk_ids_map (2 banks) ◄────┘
                                            │ bank 0: stage-1 candidates
                                            ▼
                                       controller ─► DRAM requests, stage 2
```

Lane *l* (0..3) handles embedding dimensions 128·*l* … 128·*l*+127 in every
block: its SRAM buffer slice, its input register, its PE and its part of the
query.

## Storage format in DRAM

| item | layout |
|---|---|
| document *d* | rows 8*d* … 8*d*+7 (its *root row* is 8*d*) |
| row 8*d*+*r* | bit 7−*r* of all 512 entries; bit *i* of the row belongs to entry *i* |
| stage 1 reads | rows 8*d*+0 … 8*d*+3, i.e. bits 7..4 (the signed high nibble) |
| stage 2 reads | all 8 rows of each candidate |
| document norm | 16-bit unsigned, ⌊16·‖D‖⌋ (12.4 fixed point), returned on a separate norm channel by document id |

The norms are computed when the database is built, like the embeddings. In
MIPS mode they are never requested.

## Getting INT8 results from 4-bit multipliers

Each PE has 128 multipliers for 4-bit operands. That is all stage 1 needs. An
INT8 value *v* splits exactly into a signed high nibble and an unsigned low
nibble:

  *v* = 16·*v*ₕ + *v*ₗ, with *v*ₕ = *v*[7:4] as signed (−8..7) and *v*ₗ = *v*[3:0] as unsigned (0..15).

So the exact dot product is

  Σ *q*·*d* = 256·Σ *q*ₕ*d*ₕ + 16·(Σ *q*ₕ*d*ₗ + Σ *q*ₗ*d*ₕ) + Σ *q*ₗ*d*ₗ.

Each multiplier takes 5-bit signed operands. A high nibble is sign-extended
and a low nibble is zero-extended. Two select lines choose the query nibble
(`q_hi`) and the document nibble (`d_signed`, which equals `nib_hi`).

- **Stage 1** runs one pass per document: *q*ₕ × *d*ₕ. The result is the dot
  product of the two MSB-INT4 vectors.
- **Stage 2** runs four passes per document, in the order hh, hl, lh, ll. The
  similarity calculator shifts them left by 8, 4, 4 and 0 and adds them up.

The worst-case pass is 128 × 15 × 15 = 28 800, which still fits the PE's
signed 16-bit result.

Stage-1 dot products are about 1/256 of the INT8 values. Both stages use the
full INT8 norms. The missing factor is the same for every document in the
stage, so it does not change their order.

## Inside the processing element

Each cycle, `pe` multiplies 128 query nibbles with 128 document nibbles. The
128 products are summed in two pipeline stages:

1. **Carry-save groups.** The products form four groups of 32 entries (0–31,
   32–63, 64–95, 96–127). Each group is reduced by a chain of 3:2
   carry-save adders to one sum vector and one carry vector. Nothing
   propagates a carry at this point. The 8 vectors are registered.
2. **Fusion.** The 8 vectors are compressed again and added once with a
   carry-propagate adder. The 16-bit result is registered.

The latency is 2 cycles, and a new pass can start every cycle. A sideband tag
(the `pass_tag_t` struct: pass weight, last-pass flag, document id and
document norm) travels through the pipeline with the pass.

## Ranking without division

Cosine similarity is Σ*q*·*d* / (‖Q‖·‖D‖). Comparing two such fractions does
not need a division. The norm products are never negative, so a newcomer
*n* ranks above entry *i* exactly when

  Σ*q*·*d*ₙ · (‖Q‖‖D‖)ᵢ  >  Σ*q*·*d*ᵢ · (‖Q‖‖D‖)ₙ

Both sides are computed as 65-bit signed products (`rag_pkg::frac_greater`).
In MIPS mode the similarity calculator sets every norm product to 1, so the
same comparator compares plain dot products. The query norm is
⌊16·√Σ*q*²⌋. It is computed while the query loads: the squares are summed as
the words arrive, then an integer square root produces one result bit per
cycle, 16 cycles in all.

`rerank` keeps the top-K list sorted, with entry 0 the best. The scores of
the list are in `similarity_buffer` and the ids in `chunk_ids_map`. Each new
document is inserted as follows:

- It is compared with entry 0, then entry 1, and so on, one comparison per
  cycle.
- At the first entry it strictly beats, the loop stops. The document is
  inserted there, and the entries below it move down one place.
- If it beats no entry, it is appended when the list holds fewer than K
  entries. Otherwise it is dropped.

Ties keep the earlier document ahead. A document takes one cycle to be
accepted plus one cycle per entry visited.

`chunk_ids_map` has two banks. Stage 1 fills bank 0 with the candidate set.
During stage 2 the controller reads bank 0 to find which documents to fetch,
while the rerank unit builds the final ranking in bank 1. Each entry also
stores the document's root row (id·8).

## Control and flow control

`controller` runs one query through
IDLE → QLOAD → QDIST → WAITN → RUN(stage 1) → RUN(stage 2) → DONE:

- **QLOAD.** 32 query words are written into `query_buffer` while the
  similarity calculator sums their squares.
- **QDIST.** The words are read back. Word *w* goes into slot *w* mod 8 of
  PE ⌊*w*/8⌋.
- **WAITN.** Waits for the query norm (cosine mode only).
- **RUN.** Four engines work concurrently:
  - **Fetch** requests DRAM rows, as long as the 16-row SRAM ring has room
    for every outstanding row. At a document's first row it queues the
    document id.
  - **Norm** requests document norms ahead of use, with at most 8
    outstanding.
  - **Read** moves one bit-plane per cycle from the SRAM buffers into
    `plane_gather`. When a document is complete, it is copied into the
    operand register in one cycle, so the next document can be collected
    while the PEs work on this one.
  - **Pass** starts a document only when its id and norm are queued and the
    4-entry result FIFO in front of the rerank unit has room. It then issues
    1 or 4 PE passes on consecutive cycles.

A stage ends when the rerank unit has taken every document of it. At the
switch, the number of stage-2 documents is set to the length of the stage-1
list. The list is then cleared, and the rerank unit starts writing bank 1.

This is how back-pressure travels: a busy rerank fills the result FIFO, which
holds documents in the input registers. The SRAM ring then fills up, the
fetch engine stops requesting rows, and DRAM sees no requests.

## Interface of `rag_retrieval_top`

All signals are synchronous to `clk`. `rst_n` is an active-low asynchronous
reset. The package `rag_pkg` defines the types.

| port | dir | meaning |
|---|---|---|
| `start`, `num_docs[15:0]`, `mode` | in | pulse `start` when idle or done; `mode` is `SIM_COSINE` (0) or `SIM_MIPS` (1) |
| `busy`, `done` | out | `done` stays high until the next `start` |
| `q_in_valid`, `q_in_ready`, `q_in_data[127:0]` | in/out/in | 32 words; word *w* byte *j* = query entry 16*w*+*j* (INT8) |
| `dram_req_valid`, `dram_req_ready`, `dram_req_addr[18:0]` | out/in/out | row read request (valid/ready) |
| `dram_rvalid`, `dram_rdata[511:0]` | in | row data, in request order, any latency, cannot be stalled |
| `norm_req_valid`, `norm_req_ready`, `norm_req_id[15:0]` | out/in/out | norm request by document id |
| `norm_rvalid`, `norm_rdata[15:0]` | in | norm data, in request order |
| `topk_count`, `topk_ids[K]`, `topk_roots[K]`, `topk_scores[K]` | out | final ranking (entry 0 best); scores are the INT8 dot product and the norm product |

The design never issues more requests than its buffers can absorb, so the
DRAM side needs no flow control on responses.

## Parameters and number formats

| name | default | where |
|---|---|---|
| `DIM`, `LANES`, `LANE_DIM` | 512, 4, 128 | `rag_pkg` |
| `K` (candidate set and result length) | 50 | top, rerank, buffers |
| PE group size `GROUP_DIM` | 32 | `pe` |
| `MAC_W` | 16 | PE result |
| `BUF_DEPTH` | 16 rows per SRAM buffer | top, controller |
| `META_DEPTH`, `RES_DEPTH` | 8, 4 | id/norm queues, result FIFO |
| `ID_W`, row address | 16, 19 bits | up to 65 536 documents |
| norms | unsigned 12.4 (16 × value) | query and document |
| dot product | signed 32 bits | similarity calculator onward |

## Performance

These numbers are measured in simulation with random embeddings. The DRAM
model answers after 6 cycles, and 70 % of cycles accept a request.

| documents | DRAM rows read | vs. 8 rows/doc | nibble products vs. INT8 | cycles (cosine) |
|---|---|---|---|---|
| 100 | 800 | 1.000 | 0.750 | 3 524 |
| 1 000 | 4 400 | 0.550 | 0.300 | 47 648 |
| 2 048 (1 MB database) | 8 592 | 0.524 | 0.274 | 101 899 |
| 2 724 (NFCorpus size) | 11 296 | 0.518 | 0.268 | 136 050 |
| 3 981 (SciFact size) | 16 324 | 0.513 | 0.263 | 201 201 |
| 6 513 (ArguAna size) | 26 452 | 0.508 | 0.258 | 331 261 |

For *N* documents, a query reads exactly 4*N* + 8·min(50,*N*) rows. Once the
list is full, throughput is set by the rerank loop. A random document usually
ranks below all 50 entries, so it walks the whole list: about 51 cycles per
document. Streaming alone would need 4 cycles per document in stage 1. At
200–400 MHz the largest case takes 0.8–1.7 ms.

## Where this RTL departs from, or goes beyond, the description it follows

- **Stage-2 INT8 arithmetic.** The 4-pass nibble decomposition, and the 5-bit
  operand extension that makes it possible, are this design's. The source only
  says that the PEs do INT4 MACs and that stage 2 is full INT8.
- **PE group size.** The adder grouping follows the PE drawing: four
  carry-save groups of 32 entries. The text instead speaks of 64 dimensions
  per first-stage adder group. `GROUP_DIM` can be set to 64 with the same
  results.
- **Rerank.** The comparison runs sequentially, one entry per cycle, as the
  drawn loop does. The text calls it "dense comparison". A fully parallel
  compare would give the same ranking and remove the bottleneck noted above,
  but that is not what the drawing shows.
- **Lane outputs.** One drawing labels each PE's output `128<4:0>`. Here each
  PE produces the 16-bit MAC result that the PE drawing prints.
- **Stage-1 query operand.** Stage 1 uses the query's high nibble as well as
  the document's. The PE drawing shows INT4 query operands.
- **Norm path.** In the source's block diagram, the document norm goes
  straight from DRAM to the similarity calculator. Here it waits in a queue
  in the controller and then travels with the document's last PE pass. It
  arrives at the similarity calculator in the same cycle as the dot product.
- **This design's choices.** Everything about protocols, buffer depths, FIFOs,
  credits, the separate norm channel, the 12.4 norm format, the two-bank
  chunk map, tie-breaking and reset behaviour. The SRAM buffers are a
  register-array memory model, not a compiled macro.
- **100-document case.** The published memory/compute curve shows about
  0.7 / 0.4 at 100 documents. A fixed 50-document candidate set cannot
  reproduce that; it gives 1.0 / 0.75. Larger collections agree with the
  published 0.5 / 0.25.
- **Not covered.** Retrieval accuracy, energy and area depend on real
  embeddings and a physical implementation. The RTL does not address them.

## Verification

Every testbench in `tb/` checks itself and ends with a `TB_RESULT` line.

| testbench | covers |
|---|---|
| `tb_query_buffer`, `tb_sram_buffer` | memory contents, read latency, read-during-write |
| `tb_plane_gather` | bit-plane to entry transposition, 4- and 8-plane documents, double buffering |
| `tb_pe` | all four operand sign modes, extreme operands, 2-cycle latency, tag delay |
| `tb_similarity_calculator` | query norm against a real-arithmetic square root, pass weighting, norm product, MIPS mode |
| `tb_rerank` | rerank + similarity buffer + chunk IDs map against a reference list, loop length per document, ties, both banks |
| `tb_rag_retrieval_top` | full design at default parameters against a reference model of both stages; exact DRAM row and norm counts; counts stage switches, appends, loop breaks, discards, SRAM and result-FIFO stalls, DRAM back-pressure, both modes |
| `tb_workloads` | the collection sizes in the table above |

To run one, for example the end-to-end test:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/rag_pkg.sv tb/tb_rag_retrieval_top.sv --top-module tb_rag_retrieval_top
./obj_dir/Vtb_rag_retrieval_top
```

`tb_workloads` holds 6 513 random documents and runs in a few seconds.

## Files

`rtl/rag_pkg.sv` (sizes, types, fraction compare), `query_buffer`,
`sram_buffer`, `plane_gather`, `pe`, `similarity_calculator`, `rerank`,
`similarity_buffer`, `chunk_ids_map`, `sync_fifo` (helper), `controller`,
`rag_retrieval_top`.
