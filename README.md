# A similarity-gated hyperdimensional task reasoner

This is RTL for an accelerator that picks the objects in a scene that fit a spoken or written task, such as "something to pour wine with". It does this without a vision transformer or dense CLIP-style image–text alignment. Everything is done with hyperdimensional computing (HDC):

- each detected object arrives as a bipolar hypervector of `D` bits, the query `q`;
- it is compared with `M` stored concept hypervectors by cosine similarity;
- the similarity scores are reweighted by per-class task weights;
- the best-scoring class is returned.

Successive frames of an event camera change little, so most of the hardware exists to avoid recomputing what the previous frames already produced. There are three ways to do that:

1. **Bypass.** When the system is loaded and the query is nearly identical to a cached one, the object's previous output is returned unchanged.
2. **Delta update.** When the query is close to a cached one, only the dimensions that flipped are visited. Each flipped bit corrects every class accumulator by exactly ±2, so the result matches a full recomputation bit for bit.
3. **Reasoning gate.** When the top-k classes and the margin between the best two scores match the object's previous result, the task reasoner is skipped and its cached output is reused.

A small controller also trades accuracy for time once per window. It does this by switching off item-memory banks, which lowers the effective dimension `D'`, and by choosing int8 or int4 scores.

Three parts sit outside this RTL: the spiking event encoder that produces query hypervectors, the text encoder that produces the task hypervector, and the host processor. The host loads queries, concepts and weights through a command port. It collects results from a DMA write port.

## Arithmetic

Hypervectors are stored as bits, where 1 stands for +1 and 0 for −1.

- The product of two bipolar components is XNOR.
- The unnormalised cosine of `q` with concept `h_j` over the active dimensions is `acc_j = Σ (q_i XNOR h_j,i ? +1 : −1)`, which lies in `[−D', D']`.
- The similarity of two queries is `ρ = 1 − 2|Δ|/D'`, where `|Δ|` is the Hamming distance over the active dimensions.
- When `q` differs from a cached query `q'` on the set `Δ`, the exact update is `acc_j(q) = acc_j(q') + Σ_{i∈Δ} (q_i XNOR h_j,i ? +2 : −2)`.

Normalisation divides by `D'`. Because `D'` is always a power of two, this is an arithmetic shift:

- **int8 scores:** `acc >>> (log2 D' − 7)`, saturated. This is signed Q.7, so +127 ≈ +1.0.
- **int4 scores:** `acc >>> (log2 D' − 3)`, saturated to [−8, 7], then moved to the upper nibble. This keeps the same Q.7 scale at a coarser step.

Thresholds and `ρ` are signed Q.8 values (10 bits). The controller does not compute `ρ` by division. It tests `ρ ≥ τ` exactly as `(D' − 2|Δ|)·256 ≥ τ·D'`.

The reasoner multiplies each score by its task weight: `ŝ_j = s_j · w_j`, both Q.7, rounded half up (`(a·b + 64) >>> 7`) and saturated to int8. The output is the arg-max class and its score.

## Dataflow of one query

| Step | What happens | Cycles (defaults) |
|---|---|---|
| Load | The host streams `D/CW` 64-bit chunks into the PSU query buffer. Meanwhile the PSU XOR-popcounts each chunk against all `K` cached queries, over the enabled banks only. | 128 commands |
| Find | The nearest valid cached query with the same bank mask is chosen. | 1 |
| Decide | The QoS controller applies the path policy below. | 1 |
| Align | Full path: scan every active column. Delta path: replay only the flipped indices on top of the cached accumulators. | full ≈ `D'·⌈M/W⌉`; delta ≈ `|Δ|·⌈M/W⌉` plus extraction |
| Score | Normalise, store, and sort the top-k. | `M + 1` |
| Gate | Compare the top-k key and quantised margin with the object's cached output. | 1 |
| Reason | Vector MAC over the task weights, `W` products per cycle. | `⌈M/W⌉ + 1` |
| Emit | Write a 64-bit result record over DMA. | ≥ 1 |
| Commit | Copy the query into the victim cache entry. Its accumulators were already written by the aligner. | `D/CW + 1` |

In the full-size simulation, a full-path query at `D' = 8192`, `M = 128`, `W = 64` takes 16,529 cycles from the run command to the DMA write. That is 16.5 µs at 1 GHz. Of this, 16,384 cycles are the `D'·⌈M/W⌉` column scan. A delta query costs a few hundred cycles plus `2·|Δ|`.

## Path policy (QoS controller)

Once per window (`OP_WINDOW`, which carries the object count `N` and the host's queue depth `q`), the controller latches three things:

- **High load:** `H = (N ≥ N_hi) or (q ≥ q_hi)`.
- **Effective dimension:** the largest `D' = (D/B)·2^l` such that `N · D' · ⌈M/W⌉ ≤ budget`. Banks 0 … 2^l − 1 stay on; the rest return zeros and their columns are skipped. At least one bank always stays on.
- **Precision:** the int8/int4 bit from the mode register.

Per query, the controller chooses a path from `ρ` against the nearest cached query:

| Condition | Path |
|---|---|
| a comparable cached query exists, `ρ ≥ τ_byp`, `H`, and the object has a cached output | **bypass** |
| otherwise a comparable cached query exists, `ρ ≥ τ_g`, and `|Δ| ≤ δ-budget` | **delta** |
| otherwise | **full** |

A cached query is comparable only if it was scored with the same bank mask. Otherwise its stored accumulators would be at a different `D'`.

Setting the PSU-off mode bit hides all cached queries from the controller, so every query takes the full path. This is useful for measuring what reuse saves. The result cache and the reasoning gate stay active.

The two extra conditions of this design are the δ-budget and the need for a cached output. The δ-budget stops a delta run from costing more than a full run. The cached-output condition exists because bypass has nothing to return without one.

## Partial-similarity unit and Δ-index FIFO

The PSU holds the current query and keeps `K` running Hamming distances, updated as each chunk arrives, so no separate pass is needed before the decision.

On a delta decision, its extraction machine re-reads the nearest cached query chunk by chunk. It pushes the index of every flipped active bit, lowest first, into the Δ-index FIFO (default depth 256). The aligner pops the FIFO concurrently.

When the FIFO fills, extraction stalls; `n_fifo_stall` counts those cycles. So any `|Δ|` up to the δ-budget is served with a fixed-size FIFO.

`OP_QBIND` XORs a chunk into the query buffer instead of replacing it. This is HDC binding, which lets the host form a bound prompt vector `t ⊗ r_1 ⊗ …` on chip.

## Associative aligner and banked item memory

The item memory is column-major: column `i` holds bit `i` of every concept, in `⌈M/W⌉` groups of `W` classes. It is split into `B` banks of `D/B` columns each. It has a one-cycle synchronous read port and a host write port (`OP_IMEM`, address = `col·⌈M/W⌉ + group`).

The aligner broadcasts one query bit to `W` `sim_lane`s per cycle. Each lane XNORs that bit with its class bit and adds ±1 (full) or ±2 (delta) to its accumulator. When `M > W`, the groups of a column follow in consecutive cycles.

Accumulators are kept per query-cache entry:

- a full run starts from zero;
- a delta run first loads the nearest entry's accumulators;
- every non-bypass run stores its result into the entry that the query will occupy.

That entry is chosen round-robin.

## Score buffer and top-k sorter

The score buffer normalises one class per cycle and keeps the score vector for the reasoner. It feeds a systolic insertion sorter that holds the `TOPK` (default 4) best scores with their class indices; on equal scores the lower class index stays ahead.

- The **key** is the ordered list of top-k indices.
- The **margin** is top1 − top2 (255 if only one class is valid). It is compared with its 3 low bits dropped, so small score noise does not defeat the gate.

## Reasoner, output cache and the gate

The output cache has one entry per object slot (`NOBJ`, default 64). Each entry holds the previous key, margin, class and score.

After scoring, the gate checks whether key and margin equal the cached ones. If they do, the cached output is emitted and `n_gate_reuse` counts it. Otherwise the reasoner computes `ŝ = s ⊙ w` and its arg-max, and the cache entry is rewritten.

With the reasoner disabled (mode bit 1 = 0), the output is the aligner's top-1 class.

Task weights come from one of two sources:

- **Written by the host:** `OP_WMEM`, one int8 Q.7 weight per class.
- **Recomputed on chip:** a *weight job* (`OP_RUN` with `data[0] = 1`) runs the loaded query, normally a bound prompt vector, through a full int8 alignment without touching the query cache. It then copies the resulting score vector into the weights.

Changing the weights invalidates the output cache. Writing the item memory invalidates both caches.

## Command interface

A command is `{op, addr[31:0], data[63:0]}` on a valid/ready channel. Commands are accepted only while the core is idle.

| op | name | addr | data |
|---|---|---|---|
| 0 | `CFG` | register number | value |
| 1 | `IMEM` | `col·⌈M/W⌉ + group` | `W` concept bits |
| 2 | `WMEM` | class | int8 weight |
| 3 | `WINDOW` | – | `{q[31:16], N[15:0]}` |
| 4 | `QUERY` | chunk | 64 query bits |
| 5 | `QBIND` | chunk | 64 bits XORed into the query |
| 6 | `RUN` | object slot | bit 0: weight job |

Configuration registers and their reset values:

| reg | name | reset |
|---|---|---|
| 0 | `τ_byp` (Q.8) | 243 (0.95) |
| 1 | `τ_g` (Q.8) | 128 (0.5) |
| 2 | `N_hi` | 16 |
| 3 | `q_hi` | 4 |
| 4 | cycle budget per window | all ones (all banks on) |
| 5 | δ-budget (largest `|Δ|`) | `D/8` |
| 6 | mode: bit 0 int4, bit 1 reasoner enable, bit 2 score dump, bit 3 PSU off | reasoner on, int8, no dump, PSU on |
| 7 | DMA base address | 0 |

Each query produces one 64-bit result record, written to `dma_base + 8·n`, where `n` is reset by a write to register 7. From MSB to LSB:

| bits | field |
|---|---|
| 63:56 | object slot |
| 55:54 | path (0 full, 1 delta, 2 bypass) |
| 53 | output reused (bypass or gate) |
| 52 | int4 scores |
| 51:47 | log2 of active banks |
| 46:31 | `|Δ|` to the nearest cached query |
| 30:21 | `ρ` (Q.8; −256 when no comparable entry) |
| 20:13 | class |
| 12:5 | score (Q.7) |
| 4:0 | reserved |

With the score-dump bit set, the record of every query that was aligned (every path except bypass) is followed by `⌈M/8⌉` more words at the next addresses. Each carries eight int8 aligner scores `s_j`, with class `8n` in the low byte of word `n`. These are the scores before task weighting, so a query whose reasoning was gated needs no extra work to produce them. A bypassed query returns only its record.

The top also exports counters of full, delta, bypass and gate-reuse events and of FIFO-stall cycles.

## Parameters

All sizes are parameters of `torr_top`. The defaults live in `rtl/torr_pkg.sv`.

| name | default | meaning |
|---|---|---|
| `D` | 8192 | hypervector dimension |
| `B` | 16 | item-memory banks (steps of `D'`) |
| `M` | 128 | concept classes |
| `W` | 64 | aligner lanes |
| `K` | 8 | cached queries |
| `CW` | 64 | chunk width of the query port |
| `NOBJ` | 64 | object slots in the output cache |
| `TOPK` | 4 | length of the top-k key |
| `FIFO` | 256 | Δ-index FIFO depth |

None of these numbers is published for the original design. They are chosen to be plausible for an edge accelerator. `D`, `B`, `D/CW` and `NOBJ` must be powers of two. The item memory and query cache hold about 1.1 Mbit at the defaults.

## Where this RTL departs from or adds to the source design

- **Sizes, formats and reset thresholds** are this design's own choices, as are the command set, the register map and the record layout.
- **Per-entry accumulators.** The published description keeps per-class accumulators across windows. Here every cached query has its own set, so a delta update can start from whichever cached query is nearest.
- **Choosing `D'`.** The rule for `D'` (a power-of-two bank count that fits a cycle budget) is an interpretation. The source only says that `D'` is chosen to meet the frame rate.
- **Precision.** It comes from a host register; the source does not say how it is chosen. It applies to the normalised scores; the integer accumulators stay exact so that delta updates remain exact.
- **Aligner width.** The aligner takes one column per cycle with `W` lanes. Any adder tree inside a lane therefore reduces to one signed add.
- **Not produced on chip.** Bounding boxes are not produced; the record carries the object slot for the host to attach its own box. Relation hypervectors are not stored; the host supplies them through `QBIND`.
- **Clock gating** is not modelled. Bank gating is modelled as read enables plus skipped columns, which is what sets the latency.
- **SRAMs** are written as register arrays with one read and one write port, not as compiled macros.

## Files

`rtl/`

| file | contents |
|---|---|
| `torr_pkg.sv` | shared sizes, encodings and types |
| `sim_lane.sv` | one XNOR/accumulate lane |
| `item_memory.sv` | banked concept store |
| `query_cache.sv` | `K` queries plus their accumulators |
| `psu.sv` | query buffer, distances, Δ extraction |
| `delta_fifo.sv` | Δ-index FIFO |
| `qos_controller.sv` | path policy, `D'` and precision |
| `assoc_aligner.sv` | full and delta alignment engine |
| `score_buffer.sv` | normalisation, key and margin |
| `topk_sorter.sv` | top-k insertion sorter |
| `hdc_reasoner.sv` | weight MAC and arg-max |
| `output_cache.sv` | per-object output cache |
| `host_if.sv` | command decode, registers, DMA |
| `torr_top.sv` | top level and window sequencer |

`tb/` has one self-checking testbench per block (`tb_<block>.sv`) plus three end-to-end testbenches. `tb_torr_top` and `tb_torr_top_full` run the scenario in `tb/tb_torr_top_body.svh`, which uses the driver tasks and reference model in `tb/tb_torr_model.svh`.

- `tb_torr_top` runs at reduced size (`D = 512`, `M = 16`, `W = 8`, `B = 4`, `K = 4`), in well under a second of simulation.
- `tb_torr_top_full` runs the same scenario with every parameter at its default.

The scenario drives the following windows through the design:

1. a full run, then gate reuse, small and large delta updates (the large one stalls on the FIFO), and a full run of a new query;
2. high load with a bypass, then a far query;
3. a tight cycle budget that gates banks, with full and delta runs at reduced `D'`;
4. int4 scores, then aligner-only output, then a repeat query with the PSU turned off, which must take the full path;
5. on-chip weight recompute from a bound prompt vector.

The int4 and aligner-only runs also check the score-vector dump word by word.

A bit-exact reference model checks every result record. The testbench also checks the full and delta latencies against the formulas above, and it fails if any mechanism never occurred.

`tb_torr_frames` runs a stream of frames at the default size. There are 8 frames with 6 objects each. Object queries drift between frames: some slowly, some fast, and some objects are replaced every third frame. Every record is checked against the same reference model (`tb/tb_torr_model.svh`). Each frame's cost is checked against the 60 frames/s budget at 1 GHz (16.67 M cycles), and every later frame must be cheaper than the first. The measured costs:

| frame | paths taken | cycles |
|---|---|---|
| first frame | 6 full | 101,359 |
| frames with replaced objects | 4 full, 2 delta | about 71,000 |
| coherent frames | 4 bypass, 2 delta | 4,500–4,700 |

In the frames with replaced objects, the two slowly drifting objects also fall back to full scans. Bypassed queries are not written into the query cache, so by then their last cached query has been evicted from the 8 entries. The object count and the random hypervectors are the testbench's choice; they are not measured detector output.

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself after a fixed number of cycles (watchdog).

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl --top-module tb_torr_top \
    rtl/torr_pkg.sv tb/tb_torr_top.sv
./obj_dir/Vtb_torr_top
```

Replace `tb_torr_top` with any block testbench, or with `tb_torr_top_full` or `tb_torr_frames` for the full-size runs (under a second of simulation after the build). The package is named explicitly; `-y rtl` finds the modules by file name.

All storage that is read is reset or written before use, so results do not depend on the simulator's initial values.
