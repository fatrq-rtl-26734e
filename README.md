# Tiered residual refinement accelerator for approximate nearest-neighbour search

Approximate nearest-neighbour search (ANNS) engines rank a database of embedding
vectors against a query with compressed codes (for example product quantization)
that live in fast memory. The coarse distances are not accurate enough, so the best few
hundred candidates are re-ranked with their full-precision vectors. Those vectors sit
on an SSD, and for 768-dimensional embeddings the re-ranking reads dominate the
query time.

The FaTRQ scheme (tiered residual quantization, Zhang, Ponzina and Rosing) adds a
middle tier. For every database vector `x` with coarse reconstruction `x_c`, the
residual `delta = x - x_c` is stored in far memory, such as a CXL memory
expander, as a compact ternary code plus two scalars. A coarse distance
can then be refined without fetching `x` or rebuilding `x_c`. Only the candidates
that are still good after refinement are read from the SSD. This RTL is the
refinement engine that the scheme places inside a CXL Type-2 device, next to the
far memory that holds the residual codes.

## The arithmetic

The squared distance splits into a coarse term and residual terms:

    ||x - q||^2 = ||q - x_c||^2 + ||delta||^2 + 2<x_c, delta> - 2<q, delta>

* `d0 = ||q - x_c||^2` is the coarse distance the front stage (a GPU walking
  the index) already computed. It arrives as a 4-byte value with each candidate.
* `||delta||` and `<x_c, delta>` are computed offline and stored with the record.
* `<q, delta>` is estimated from a ternary code `c` in `{-1,0,+1}^D` for the
  direction of `delta`. The best code keeps the signs of the `k` largest-magnitude
  components, and `e_dc = c / sqrt(k)`. With `S = <q, c>` the estimate is
  `<q, delta> ~ ||delta|| * S / sqrt(k) * <e_dc, e_delta>`. `S` only needs
  additions and subtractions of query elements.

The final estimate is a linear model learned offline by least squares on pairs near
the top-k boundary:

    d_est = W0*d0 + W1*d_ip + W2*||delta||^2 + W3*<x_c, delta>,
    d_ip  = -2 * ||delta|| * S / sqrt(k)

Only two scalars are stored per record, so the per-record cosine
`<e_dc, e_delta>` is not available. This design folds it into the learned weight
`W1`. It counts `k` in hardware and takes `1/sqrt(k)` from a table.

**Code packing.** The code stores five ternary digits per byte as
`y = sum_{i=0..4} 3^i (x_i + 1)`, so `y` is in 0..242. That is 1.6 bits per
dimension. A 768-dimensional code takes 154 bytes, and with the two 4-byte scalars a
record is about 162 bytes.

**Number formats (this design's choice).** Distances, the two scalars and the
weights are signed 32-bit values with 16 fraction bits. Query elements and
raw-vector elements are signed 16-bit values with 8 fraction bits. Every product
is shifted back to 16 fraction bits and saturated to 32 bits. The table holds
`rsqrt[k] = floor(2^16 / sqrt(k)) = isqrt(floor(2^32 / k))` for `k = 1..D`, with
`rsqrt[0] = 0`, and is computed at elaboration. An all-zero code therefore gives
`d_ip = 0`.

## Dataflow through the accelerator

```
 front stage ──(id, d0)──► pending FIFO ──► far-memory read request (rec_req)
                                │
 far memory ──record beats──►  ESTIMATOR  ◄── query buffer (port A)
   (rec_rsp)                    │ 32 ternary decoders → 160 muxes → adder tree
                                │ accumulate S, k over 5 beats
                                │ weighted accumulation (4-stage MAC)
                                ▼
                          TOP-nK QUEUE (1024)     candidates pushed out = pruned
                                │ first n_refine entries
                                ▼
 storage ◄── raw-vector read (raw_req) ◄── pending FIFO
 storage ──raw beats──► FULL-PRECISION DISTANCE ◄── query buffer (port B)
   (raw_rsp)                    ▼
                          TOP-K QUEUE (1024) ──first k_out──► results (res)
```

One query goes through these phases (`fatrq_pkg::phase_t`):

| phase  | what happens |
|--------|--------------|
| IDLE   | The query is written into the query buffer, one element per cycle. Weights, `n_refine` and `k_out` are set. `start` clears both queues. |
| FILTER | Candidates `(id, d0)` are accepted. Each one issues a residual-record read and waits in a 64-entry FIFO until its record returns. Records return in order and are scored at one beat per cycle. `cand_last` ends the list. |
| FDRAIN | The design waits until every requested record is scored and the Top-nK queue has settled. |
| REFINE | Up to `n_refine` entries are popped from the Top-nK queue, best first. Each pop issues a raw-vector read. Returned vectors get exact distances, which go to the Top-K queue. |
| RDRAIN | The design waits until every raw vector is processed and the Top-K queue has settled. |
| OUTPUT | Up to `k_out` results stream out in ascending distance. `res_last` marks the last one, and `done` pulses. |

The paper's block diagram gives the blocks, the two queues and the order
estimator → Top-nK → full-precision distance → Top-K. The phase sequencing,
the FIFOs and the port framing are this design's choices.

## The blocks

| file | block | notes |
|------|-------|-------|
| `rtl/fatrq_pkg.sv` | types and formats | Distance, pointer, trit, queue entry, metadata, weights, phases. |
| `rtl/ternary_decoder.sv` | 256-entry decoder table | Turns one byte into five digits. The unused codes 243..255 decode to zeros. |
| `rtl/query_buffer.sv` | query buffer | D x 16-bit registers. Two combinational slice read ports (160 and 16 elements). Positions past `D` read as 0. |
| `rtl/ternary_adder_tree.sv` | multiplexers + adder tree | Per lane it selects +q, -q or 0, then sums in a balanced tree. It also counts non-zero digits. |
| `rtl/weighted_accumulation.sv` | MAC array | Builds the feature vector and the `A.W` product in 4 pipeline stages. |
| `rtl/fatrq_estimator.sv` | residual distance estimator | Decoders, tree, accumulation of each record over its beats, and weighted accumulation. |
| `rtl/priority_queue.sv` | Top-nK / Top-K queue | A register-and-comparator chain, described below. |
| `rtl/full_precision_dist.sv` | exact distance | 16 subtract-square lanes per beat, accumulated over 48 beats. |
| `rtl/sync_fifo.sv` | helper | Holds the outstanding reads. |
| `rtl/fatrq_accel.sv` | top | Wiring and phase control. |

### The priority queues

This is the least obvious part. Each queue is a chain of `DEPTH` (1024) stages. A
stage holds one entry (32-bit distance and 32-bit pointer) and has one comparator. A
new candidate enters stage 0. In every stage the incoming candidate is compared with
the stored one: the smaller distance stays, and the larger one is registered into
the next stage. Moving candidates advance one stage per cycle in the same
direction, so several insertions can be in flight at once. This keeps the chain
sorted and accepts one insertion per cycle without any global comparison. A
candidate pushed out of the last stage is outside the best `DEPTH` and is dropped
(`drop`). In the Top-nK queue, this drop is where the design prunes candidates
early, without any storage access.

An insertion settles within `DEPTH` cycles, and `busy` covers that time. Entries
are read out only while `busy` is low. `pop` returns the head and shifts every
stage one step toward the head, giving one entry per cycle in ascending order. The
order among equal distances is not defined. The chain follows the paper's
description: registers and comparators, with smaller values kept toward the front.
The read-out scheme is this design's.

## Interfaces and timing

* **Candidates** (`cand_*`): valid/ready. A candidate is accepted only when the
  far-memory request port is ready and the pending FIFO has room. Holding
  `cand_valid` and the payload until accepted is checked by an assertion.
* **Residual records** (`rec_req_*`, `rec_rsp_*`): one request per candidate.
  Responses must come back in request order. A record is `CODE_BEATS` beats
  (5 at the defaults) of `BEAT_BYTES` (32) code bytes, framed by
  `rec_rsp_first` and `rec_rsp_last`. The two scalars travel on `rec_rsp_meta`
  with the last beat. Beats may have gaps, but there is no backpressure: the
  estimator takes one beat per cycle. Bytes past the 154th and digits past `D`
  are ignored.
* **Raw vectors** (`raw_req_*`, `raw_rsp_*`): one request per refined candidate,
  answered in order. A vector is `RAW_BEATS` beats (48) of `FP_LANES` (16)
  elements.
* **Results** (`res_*`): valid/ready. Results come in ascending exact distance.
* **Latency:** a candidate's estimate enters the Top-nK queue 4 cycles after
  the last beat of its record. An exact distance is ready 1 cycle after the last
  raw beat. A queue settles in at most 1024 cycles after its last insertion.
* Assertions check that no response arrives without a request, that no queue is
  popped while busy, and that the FIFOs neither overflow nor underflow.

## Where this RTL departs from or adds to the paper

* The per-record factor `<e_dc, e_delta>` is folded into the weight `W1`, and
  `1/sqrt(k)` is applied in hardware (see above). The paper only says that the
  estimate of `-2<q, delta>` comes from the ternary code and the stored scalars.
* Fixed-point formats are this design's choice, including a 16-bit fixed-point
  raw vector where the paper uses 32-bit floats. The paper gives no widths beyond
  the 4-byte distance and the 4-byte scalars.
* The paper counts the storage cost as `768/5 + 8 = 162` bytes, but in the same
  sentence calls the scalars "four bytes". Here the record has two 4-byte scalars
  (8 bytes) and 154 whole code bytes.
* The query buffer also feeds the full-precision unit. In the paper's figure it
  appears only inside the estimator.
* Only one residual level is built, which is the paper's main case. Stacked levels
  can be chained by passing one level's estimate in as the next level's `d0`. The
  paper's figure calls that input "approximate distance from last level".
* Pruning happens by rank: a candidate is dropped when it falls out of the
  1024-entry Top-nK queue. The refinement depth `n_refine` is a run-time register.
  The paper states the goal ("stops early once a candidate is provably outside the
  top-k") but gives no bound test, so none is built.
* Building the ternary codes (sort, prefix sums, choice of `k`) and fitting the
  weights are offline software steps. The accelerator only decodes codes and
  applies the weights, which are an input.
* The CXL Type-2 IP, the DRAM controller, the NVMe controller, the DRAM, the SSD
  and the GPU are not included. Their traffic appears as the top's ports.
* The queue read-out, the phase sequencing, the 32-byte far-memory beat, the
  16-element storage beat, the 64-entry outstanding-read FIFOs and the in-order
  response rule are all this design's choices.

## Sizes against the evaluated workloads

All defaults are the paper's numbers where it gives one: `D = 768` for both
evaluated datasets (Wiki, 88M SBERT vectors; LAION, 100M CLIP vectors) and 1024
entries per queue. The evaluated list shapes fit without pruning: IVF at 90%
recall on Wiki refines 320 candidates and then makes 28 storage reads, and CAGRA
refines 120 candidates and makes 17 reads. The refinement study refines the top
100 and reads 25. 32-bit pointers cover 100M vectors. The residual store
(88M x 162 B = 14.3 GB) lives in the external far memory.

## Simulation

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. `tb/fatrq_ref_pkg.sv` holds
the reference arithmetic. It works from the ternary digits with 128-bit integers
and a floating-point `1/sqrt(k)`, so it shares no tables with the design.

| testbench | what it covers |
|-----------|----------------|
| `tb_ternary_decoder` | All 243 digit combinations encoded and decoded, plus the 13 unused codes. |
| `tb_query_buffer` | Random query and every slice of both ports, including past `D`. |
| `tb_ternary_adder_tree` | 200 random 160-lane slices, including all -1 digits and the most negative query value. |
| `tb_weighted_accumulation` | 300 back-to-back candidates and corner cases (k = 0, k = D, saturation). Checks the 4-cycle latency. |
| `tb_fatrq_estimator` | 40 random 768-D records, some with gaps between beats. Includes all-zero and all-non-zero codes. Checks the 4-cycle latency. |
| `tb_priority_queue` | Bursts of 10 to 100 candidates into 16 stages, many ties. Checks drops, count, settle time and sorted read-out. |
| `tb_full_precision_dist` | Six 768-D vectors, including a saturated one. Checks the 1-cycle latency. |
| `tb_fatrq_accel` | End to end at reduced sizes (D = 40, queues 16 and 8, FIFOs 4). Runs three queries against models of far memory, storage and the result consumer. Requires every mechanism to occur: FIFO-full stalls, backpressure on every port, Top-nK pruning, Top-K overflow, refinement cut by `n_refine`, refinement stopped by an empty queue, all-zero codes. |
| `tb_fatrq_full` | End to end with every parameter at its default. One query of 1100 candidates, which overflows the 1024-entry Top-nK queue. 40 refined, 10 returned. |
| `tb_fatrq_workloads` | Default sizes, with the evaluated list shapes: 320/28, 120/17 and 100/25 candidates/reads, k = 10. The data is random. |

The end-to-end testbenches use a far-memory latency of 271 cycles, which is the
paper's 271 ns CXL latency at 1 GHz. The storage latency is 2000 cycles,
shortened from 45 us to keep the runs short.

Build and run with Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/fatrq_pkg.sv tb/fatrq_ref_pkg.sv tb/tb_fatrq_full.sv --top-module tb_fatrq_full
./obj_dir/Vtb_fatrq_full
```

Replace the testbench name to run any of the others. The default-size end-to-end
run builds in about 10 s and simulates in about 1 s.

## Changing the design

* `D`, `BEAT_BYTES`, `FP_LANES`, `NK_DEPTH`, `K_DEPTH` and `PEND_DEPTH` are
  parameters of `fatrq_accel`. The code length, beat counts and the rsqrt table
  follow from them.
* Widths and fraction bits are constants in `fatrq_pkg`. If you change them,
  change `fatrq_ref_pkg` to match.
* The queue cost grows linearly with its depth: each entry has 64 flip-flops, a
  comparator and a multiplexer.
