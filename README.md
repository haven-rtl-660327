# HAVEN near-storage search unit — SystemVerilog RTL

Billion-scale vector search with IVF-PQ runs in three steps. Step 1 probes the coarse centroids. Step 2 scans the compressed PQ codes of the chosen lists. Step 3 reranks the best few hundred candidates of each query against their full-precision vectors. Steps 1 and 2 fit in GPU memory. Step 3 does not: the raw vectors of a billion-vector set take 100–250 GB, so on a normal GPU they sit in host DRAM or on an SSD, and reranking is limited by PCIe.

HAVEN puts a High-Bandwidth Flash (HBF) stack in the GPU package next to the HBM stacks. HBF is die-stacked 3D NAND with an HBM-like interface. The raw vectors live in the HBF. The reranking is done by a small **near-storage search unit (NSU)** on the logic base die under the flash dies. The GPU sends only candidate IDs to the NSU and gets back the k nearest IDs with their exact distances. The raw vectors never leave the stack.

This RTL implements the NSU. The flash stack, its analog periphery, the TSVs, the PHY, the GPU and the HBM are not logic and are not part of it. The NSU talks to the flash through a simple read-request / read-data port. A behavioural model of that port is included for simulation.

## Dataflow

```
 GPU: candidate IDs ──► rerank queues (32 × 1,024) ──► round-robin ──► address ──► read request ──► HBF
                                                         scheduler      generation                    │
 GPU: results ◄── top-k unit ◄── distance computation (32 MACs) ◄──────────── raw data beats ◄────────┘
                  (256-point bitonic sorter)
```

| Part | Module | Follows the paper | This design's choice |
|---|---|---|---|
| Rerank queue | `rerank_queue` | 32 queues of 1,024 × (32-bit ID + 32-bit distance) = 8 KB each | one query per queue; a list is sealed by its last entry |
| Queue scheduler | inside `haven_nsu` | — | round robin, drains one complete list at a time |
| Address generation | `addr_gen` | turns an ID into the raw vector's address and issues a read | linear map `base + id × stride`; request format |
| Distance computation | `dist_comp` | 32 multiply-accumulators | 8-bit integer elements; L2 and inner product; per-queue query buffer; 2-stage pipeline |
| Top-k unit | `topk_unit` | uses a parallel 256-point bitonic sorter | running-list merge, k ≤ 128 |
| Bitonic sorter | `bitonic_sorter` | 256 points, parallel | register after each of the 36 stages |
| Top | `haven_nsu` | block set and connections | all port protocols |

The paper gives the NSU's target clock as 1 GHz in a 22 nm process. Nothing here has been timed against that target.

## Queries and queues

Each rerank queue holds the candidate list of one query. The GPU pushes `(queue, ID, PQ distance)` entries on the `cand_*` stream and marks the final entry with `cand_last`. That **seals** the queue. A sealed queue takes no more pushes until it has been drained. A push to it holds `cand_ready` low, and so does a push to a full queue. The PQ distance is stored next to the ID, as the paper's 8 KB sizing implies, but the rerank replaces it with the exact distance and does not read it.

The scheduler only starts sealed queues. It picks the next one round robin and sends that queue's entries to address generation, one per cycle, until the sealed list is empty. Then it moves to the next sealed queue. Because lists are processed whole and in order, everything downstream sees one query at a time. Each candidate carries a tag of queue index, last-of-query flag and ID through the flash read. The rest of the pipeline needs no other bookkeeping.

The query vector is written by the host into a buffer inside `dist_comp` (`qw_*`, 32 elements per write, up to 24 writes for 768 dimensions). There is one slot per queue. A query must be written before its candidates are processed.

## Reading the raw vectors

`addr_gen` computes `addr = cfg_base + id × cfg_stride`. The request is `{addr, beats, tag}` with `beats = cfg_beats = ceil(dim / 32)`. The flash must return the requested beats **in request order**, each 256 bits (32 elements) and each with the request's tag. Many requests may be outstanding. The NSU applies back-pressure on the data with `hbf_rsp_ready`. The paper does not describe the flash-side protocol, so this one is an assumption. A real HBF channel with out-of-order completion would need a reorder buffer in front of `dist_comp`.

`cfg_stride` may be larger than the vector (for example 128 B for 100-byte SPACEV vectors) or equal to it. Lanes past `cfg_dim` in the last beat are masked, so they may hold the start of the next vector.

## Distance computation

Each beat's 32 elements meet the matching 32 query elements in 32 lanes:

- `METRIC_L2`: each lane computes `(x − q)²`; the result is `Σ (x − q)²`.
- `METRIC_IP`: each lane computes `x · q`; the result is `2³¹ − Σ x·q`. Smaller is better for both metrics, so the top-k unit need not know the metric.

`cfg_signed` picks int8 or uint8 elements. The lane products are registered (stage 1). An adder tree then sums them into a 32-bit accumulator (stage 2). A vector takes `cfg_beats` cycles, and its distance appears two cycles after its last beat.

At 1 GHz the unit takes in 32 B per cycle, i.e. 32 GB/s. That is far below the 460 GB/s per stack that the paper allows the flash. With the paper's 32 MACs, the MACs and not the flash limit how fast one NSU reranks.

## Top-k selection (the part worth reading closely)

The sorter sorts 256 items, but a query may have up to 1,024 candidates. `topk_unit` therefore keeps a **running list** of the best K_MAX = 128 candidates seen so far. It gathers new candidates in a second list of 128. When the second list is full, or the query's last candidate arrives, the unit runs a **sorter pass**:

1. Build 256 sort elements: the 128 running entries and the 128 new ones. Unused slots are filled with padding.
2. Each element's sort key is `{invalid, distance}` (33 bits). Padding has `invalid = 1`, so it always sorts after every real candidate, even one with distance `0xFFFFFFFF`.
3. Each element carries its **slot number** (0–255) as payload instead of its 32-bit ID. This makes the network 41 bits wide instead of 65. After the pass, the lower 128 outputs say which slots survive, and the IDs are copied from those slots.
4. The lower 128 outputs become the new running list.

A query of n candidates needs ceil(n / 128) passes: 8 passes for a full 1,024-entry queue. Each pass stalls the input for 1 + 36 cycles. For 128-dimension vectors, 128 candidates take 512 cycles to stream, so the sort overhead is about 7 %.

After the last pass, the first `min(cfg_k, n)` entries leave on `res_*` in ascending order, one per cycle. Each carries its queue index and rank, and the last one is flagged. The running list is then cleared. `cfg_k` may be 1–128. The paper evaluates recall at k = 100.

## Bitonic sorter

`bitonic_sorter` is the textbook Batcher network for N = 2ⁿ inputs:

- It has n merge phases.
- Phase p has p + 1 stages, with partner distances 2ᵖ, 2ᵖ⁻¹, …, 1.
- In each stage, element i is compared with element i XOR d. The pair is put in ascending order when bit p + 1 of i is 0, and in descending order otherwise.

For N = 256 that is 36 stages of 128 compare-exchange units. A register follows every stage. A new set enters every cycle and leaves 36 cycles later, with no back-pressure.

## Interfaces of `haven_nsu`

All streams are valid/ready. A transfer happens on a rising clock edge when both are high. Reset is asynchronous and active low.

| Group | Signals | Notes |
|---|---|---|
| config | `cfg_base` (40), `cfg_stride` (16), `cfg_dim` (10), `cfg_beats` (5), `cfg_metric`, `cfg_signed`, `cfg_k` (8) | hold steady while queries run |
| candidates in | `cand_valid/ready`, `cand_queue` (5), `cand` {distance, id}, `cand_last` | |
| query write | `qw_en`, `qw_queue`, `qw_beat`, `qw_data` (256) | |
| flash read | `hbf_req_valid/ready`, `hbf_req` {addr, beats, tag} | |
| flash data | `hbf_rsp_valid/ready`, `hbf_rsp_data` (256), `hbf_rsp_tag` | in request order |
| results | `res_valid/ready`, `res_qidx`, `res_rank`, `res_cand` {distance, id}, `res_last` | |
| status | `queue_nonempty` (32), `sort_pass` | |

Shared types and constants (`nsu_tag_t`, `hbf_req_t`, `cand_t`, `metric_e`, the sizes) are in `rtl/haven_pkg.sv`.

## Parameters

| Name | Default | Origin |
|---|---|---|
| queues `NQ` | 32 | paper |
| queue depth `DEPTH` | 1,024 | paper |
| ID / distance width | 32 / 32 | paper |
| MAC lanes | 32 | paper |
| sorter points `SN` | 256 | paper |
| element width | 8 | paper's 8-bit datasets |
| maximum dimension | 768 | paper's largest dataset |
| address width | 40 | this design (1 TB) |
| K_MAX | 128 | this design (SN / 2) |

## Where this departs from, or goes beyond, the paper

- **Element format.** Only 8-bit integer vectors are supported. The paper's Wiki-88M set has 32-bit elements and would need floating-point MACs, which are not built.
- **Added logic.** The paper does not describe the query buffer, the scheduler, the address map, the read protocol or the top-k merge scheme. The ones here are the simplest that do the job.
- **Memories.** Memories are plain arrays. The 2 Mbit of rerank-queue storage would be SRAM macros in silicon.
- **Area and power.** The paper reports 4.11 mm² and 620 mW in 22 nm. No figures from this RTL are claimed to match.

## Simulating

Every testbench checks itself and ends by printing `TB_RESULT checks=N failures=M`. Example with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/haven_pkg.sv tb/tb_haven_pkg.sv \
  --top-module tb_haven_nsu -y rtl -y tb +libext+.sv -j 4 && ./obj_dir/Vtb_haven_nsu
```

| Testbench | What it covers |
|---|---|
| `tb_rerank_queue` | 1,024-entry fill, full and sealed stalls, order, last flag, concurrent push/pop |
| `tb_addr_gen` | 2,000 random requests under back-pressure, address arithmetic, 1-cycle latency, full rate |
| `tb_dist_comp` | L2/IP, signed/unsigned, 100/128/768 dimensions, masking, 2-cycle latency |
| `tb_bitonic_sorter` | 200 random sets back to back, ties, reversed input, 36-cycle latency |
| `tb_topk_unit` | 1–1,024 candidates per query, k from 1 to 128, pass count, 37-cycle pass stall |
| `tb_haven_nsu` | whole unit at default size with the flash model (`tb/hbf_model.sv`) |

`tb_haven_nsu` runs 8 queries in three settings: BIGANN-like, SPACEV-like, and 768-dimension. It checks every result against a software rerank. It also requires each mechanism to occur at least once:

- queue switch
- multi-pass merge
- flash back-pressure
- result back-pressure
- GPU stall on a busy queue
- a list shorter than k
- metric switch
- a full queue

The flash model fills its address space with a fixed hash of the address (`tb_haven_pkg::flash_byte`). The reference can therefore compute any vector without storing a database.

Building the 256-point sorter takes Verilator about a minute. The simulations themselves take well under a second.
