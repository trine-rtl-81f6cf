# TRINE accelerator RTL

Multimodal inference mixes very different kernels. Vision transformers and
CNNs are dense matrix products, pruned attention is a *sampled* product
(only some entries of Q·Kᵀ are needed), and graph networks are sparse
products. TRINE runs all of them on one fixed FPGA image. Its central idea is
a single PE array, the **mode-switchable engine (MSE)**, whose interconnect
and per-PE operation are chosen per kernel:

- dense work uses weight- or output-stationary systolic dataflow;
- moderately sparse work uses a 1 × C_S SIMD row;
- very sparse or skewed work uses a routable adder tree (RADT).

Next to the array sits an **in-stream top-k unit**. It prunes scores while
they leave the array and writes the positions of the survivors into a
**sparse queue buffer (SQB)**. The SQB then drives the indexed reads of the
next sparse kernel. Pruning never leaves the chip, and the sparse modes only
touch the pairs that survived.

This repository holds synthesizable SystemVerilog for the accelerator side of
that design, with self-checking testbenches for every block.

* It models the default build: a 2 × 2 grid of RPUs, each with 32 × 32 PEs,
  int8 operands and top-k up to k = 256.
* It does not include the host processor, its DMA, external memory, or the
  compiler and runtime that produce instruction blocks.

## 1. Organisation

```
             host port (request/response, 512-bit words)
                              |
                      host_interface ---- dep_scoreboard (16 event flags)
            +-----------------+------------------+
            |                                    |
      RPU(0,0) ...                         RPU(0,1)
            | inter_rpu_buffer                   | inter_rpu_buffer
      RPU(1,0)                             RPU(1,1)
```

Each **RPU** (`trine_rpu`) is a complete engine. Data flows through it in
this order:

```
 LB (RS x int8) --+--> left feed skew ---------+
 TB0 (CS x int8) -+--> top feed skew / direct -+--> MSE (RS x CS PEs)
 TB1 (CS x int8) -+--> column operand ---------+        |
 SQB --> address generator --> indexed LB/TB reads      v
                                          bottom deskew (WS only)
                                                   |
                 top-k engine: bitonic sorter -> center buffer (CB) -> merger
                                                   |  values         | positions
                               nonlinear unit (requant, norm, act)   +--> SQB
                                                   |
                                    BB (result buffer) and, optionally,
                                    the inter-RPU buffer to the RPU below
```

The ID/EX unit (`idex_unit`) takes one instruction block at a time from a
small queue. It waits until the block's dependency tags are set, then
sequences the buffers, feed schedulers and array for that block. It waits
again until the last result has left the nonlinear unit, and then raises the
block's done tags.

Finishing one block before starting the next is how a mode change drains
the pipeline. Since kernels run for hundreds or thousands of cycles, the few
cycles lost are small.

## 2. The mode-switchable engine

Each PE (`trine_pe`) has:

- west and north operand inputs that are forwarded east and south;
- a partial-sum input from the PE above and a cross-row tap input;
- a two-word register file, holding a stationary weight and an accumulator;
- an ALU with three operations: MAC, ADD and PASS.

Two muxes per PE set the dataflow:

- the *x* operand is either the west input or a broadcast value;
- the *y* operand is either the north stream or the stored weight.

The array (`trine_mse`) chooses the operation of every PE from the mode and
the PE's row and column.

| mode | operands | what each PE does | result leaves at |
|---|---|---|---|
| OS (output stationary) | LB column k enters row i from the west and TB0 row k enters column j from the north, both skewed | `acc += a·b` | after the stream: one *drain* cycle copies every acc into the partial-sum register, then RS−1 PASS cycles shift the rows out of the bottom (row RS−1 first) |
| WS (weight stationary) | RS TB0 rows are shifted in as weights (last row first); LB vectors enter from the west, skewed | `psum_out = psum_in + x·w` | bottom row, deskewed by a reversed feed skew, RS+CS cycles after issue |
| 1 × C_S SIMD | one LB element (the SQB gives its row i, column j) is broadcast along row 0; TB0 row j comes from the north | row 0 only: `acc += A[i,j]·B[j,:]` | a drain cycle at every change of i and after the last entry, so each output word is one row of A·B |
| RADT | TB1 row i in `x_col` and TB0 row j from the north | row 0 multiplies lane by lane (lanes outside `lane_mask` give 0); rows 1..log2 C_S form the tree | row log2 C_S, log2 C_S + 1 cycles after the operands |
| normal SIMD | TB1 and TB0 words | row 0: element-wise multiply or add | row 0 |
| IMPORT | — | array idle; words from the inter-RPU buffer are written to LB, TB0 or TB1 | — |

**The adder tree.** Level *l* of the tree sits in array row *l*, for *l* from
1 to log2 C_S. The PE in column *j*, where *j* is a multiple of 2^l, adds two
partial sums:

- its own, from the row above;
- the one in column j + 2^(l−1) of the row above, which the short cross-row
  tap brings over.

Every other PE of the row passes its partial sum down. Levels above
`radt_lg` only pass. A block therefore reduces lane groups of
P = 2^radt_lg to one sum each, found in lane g·P.

A tree whose size is not a power of two, such as a 3-input tree, is
obtained by masking lanes of the next larger
tree. All adds are registered, so the tree is fully pipelined and accepts one
operand pair per cycle. Only rows 0..log2 C_S work in this mode.

## 3. Feed schedulers and the sparse queue

`feed_skew` delays lane *i* by *i* cycles. This lines up the diagonal
wavefront that the systolic modes need, so the host writes plain row-major
words and never repacks data. With `REVERSE` set, lane *i* is delayed by
N−1−i cycles instead. The same module, 32 bits wide, removes the skew from
the WS outputs.

The SQB (`sparse_queue_buffer`) is a FIFO of words. Each word holds up to 32
positions pos(i,j), with 8 bits each for row and column, plus a lane mask.
It has two writers:

- the top-k engine writes a whole word per cycle;
- the host can push single entries.

A priority encoder over the head word hands out one entry per cycle, even
across word boundaries, so the sparse modes never wait on a bubble. For
every entry the address generator works out the buffer addresses:

- 1 × C_S SIMD: LB word `a_base + j`, lane `i`, and TB0 row `b_base + j`.
  It also flags a change of row.
- RADT: TB1 row `a_base + i` and TB0 row `b_base + j`.

After top-k pruning of an 8 × 8 score block `S = Q·Kᵀ`, the SQB holds the k
surviving (i, j) pairs. A RADT block with P = C_S then computes exactly those
k dot products Q[i]·K[j], and nothing else.

## 4. The top-k engine

Selecting k items from a long stream in a single large bitonic network needs
area O(n log² n). TRINE splits the work instead:

1. **Bitonic sorter** (`bitonic_sorter`). It is C_S = 32 lanes wide, matching
   the array's output word, and fully pipelined: 15 register stages for 32
   lanes, one word per cycle. Each lane carries a 32-bit score and its
   pos(i,j). Invalid lanes sort below every valid one.
2. **Center buffer (CB)**. A 256-word FIFO between the two stages. It absorbs
   the pauses of the merger.
3. **Merger** (`topk_merger`). It keeps a sorted list of the best
   KMAX = 256 entries of the current *selection group* and merges one sorted
   word into it per cycle.
   - Element q of the word lands at rank q + #{list entries ≥ it}.
   - Every output position then takes either the word element ranked there
     or the list entry that the word elements before it shifted down.

   After the group's last word, it emits the first k entries as ⌈k/32⌉
   words.

Either stage can be bypassed per block (`sort_en`, `topk_en`). With only the
sorter on, every word leaves sorted.

An optional threshold drops scores below `thr` before the merge.

**Selection groups.** By default, all output words of one block form a
single group: for example, the whole 32 × 32 score tile of an OS block. With
`row_grp` set, every output word is a group of its own, which gives row-wise
top-k over C_S scores.

**Back-pressure.** In the row-wise case the merger needs two cycles per word
(merge, then emit), so the CB fills up. When fewer than CB_DEPTH/2 words are
free, the engine lowers `in_ready` and the ID/EX unit stops issuing. Half the
CB covers every word already in flight: at most RS+CS+15 = 79 words at the
default size. The RPU counts these stall cycles.

The engine's outputs go two ways: values to the nonlinear unit and the
bottom buffer, and positions to the SQB (when `sqb_load` is set).

## 5. Nonlinear unit and number formats

| stage | format |
|---|---|
| array products, partial sums | int8 × int8 → int32 |
| requantise (`in_shift`) | int32 → Q7.8 (16-bit, 8 fraction bits), saturating |
| normalisation (`norm_unit`) | LN over the 32 lanes of a word, or BN as a per-lane affine map (scale/bias registers written by the host) |
| activation (`act_unit`) | GELU, ELU or softmax over the valid lanes of a word |
| quantise (`out_shift`) | Q7.8 → int8, saturating, into BB |

- **LN** computes the mean and variance with adder trees, then
  σ = isqrt(var) and 1/σ = 2¹⁶/σ.
- **GELU** and **ELU** interpolate linearly between 17-point tables with a
  step of 0.5:
  - GELU: the table holds round(256·x·Φ(x)) on [−4, 4]. Beyond that range
    the output is x or 0.
  - ELU: the table holds round(256·(eˣ−1)) on [−8, 0].
- **Softmax** computes e^(x−max) as 2^u with u = (x−max)·log2 e. The fraction
  of u goes through a 9-point table of round(2¹⁵·2^(n/8)), and the result is
  normalised by one reciprocal per word.

Accuracy measured by the testbenches:

- GELU and ELU are within 8 Q7.8 LSB (0.03) of the exact functions.
- LN is within 3 % + 4 LSB.
- Softmax is within 3 % + 2 LSB.

The nonlinear unit has a latency of 7 cycles and takes one word per cycle.

## 6. Instruction blocks and the host port

An instruction block is the packed struct `trine_pkg::instr_t`, written to an
RPU in the low bits of one host word.

| field | meaning |
|---|---|
| `mode` | WS, OS, SIMD1, RADT, SIMDN, IMPORT |
| `a_base`, `b_base`, `out_base` | base addresses: LB or TB1 (A operand), TB0 (B operand), BB (or the IMPORT destination) |
| `len` | K (OS), number of vectors (WS, SIMDN, IMPORT), number of SQB entries (SIMD1, RADT) |
| `elt_add`, `radt_lg`, `lane_mask` | SIMDN add/multiply; RADT tree size and active lanes |
| `imp_dst` | IMPORT destination buffer |
| `sort_en`, `topk_en`, `topk_k`, `thr_en`, `thr`, `row_grp`, `sqb_load` | pruning options |
| `row_base` | row index given to pos(i,j) of the first output row |
| `in_shift`, `norm`, `act`, `out_shift` | nonlinear chain |
| `fwd` | also push every result word into the inter-RPU buffer below |
| `wait_tags`, `done_tags` | dependency tags: start only when all `wait_tags` flags are set; set `done_tags` on completion |

The host port of `trine_top` is a request/response port. A request carries
`h_valid`, `h_we`, the RPU number `h_rpu`, a target `h_tgt`, a word address
`h_addr` and `h_wdata`, and is taken when `h_ready` is high. Read data comes
back on `h_rvalid`/`h_rdata` one cycle after an accepted read.

| target | write | read |
|---|---|---|
| `HT_LB`, `HT_TB0`, `HT_TB1` | one buffer word (lane l in bits 8l+7..8l) | — |
| `HT_PARAM` | address 0: per-lane norm scale, address 1: per-lane bias (16 bits per lane) | — |
| `HT_INSTR` | push an instruction block | — |
| `HT_SQB` | push one position {row, col} in bits 15..0 | — |
| `HT_BB` | — | one result word |
| `HT_CTRL` | clear the flags in the mask | {flags, RPU busy bits} |

Blocks on different RPUs synchronise through the 16 shared flags of
`dep_scoreboard`. A consumer block lists a producer's done tag in its
`wait_tags`. It can be queued at any time and starts by itself once the flag
is set. The host clears flags before reusing them.

**Inter-RPU exchange.** A block with `fwd` pushes its result words into the
buffer below its RPU. An IMPORT block on the lower RPU copies `len` words
into one of its buffers, waiting for each word as it arrives. The buffer
applies no back-pressure to the producer, so a program must not forward more
than `IRB_DEPTH` (64) words ahead of the consumer.

## 7. Timing summary (default size, RS = CS = 32)

| path | cycles |
|---|---|
| OS block | 1 clear + K stream + RS+CS+1 flush + RS drain, then the top-k and nonlinear latency |
| WS block | RS weight loads + vectors; each result word leaves RS+CS cycles after its issue |
| RADT / SIMD | one SQB entry or vector per cycle; RADT result after log2 C_S + 2 cycles |
| bitonic sorter | 15 |
| merger | 1 per word + ⌈k/32⌉ to emit |
| nonlinear unit | 7 |
| host read | 1 |

The clock target of the reference build is 300 MHz. This RTL has not been
taken through FPGA place and route.

## 8. What follows the source design and what is this design's own

These parts follow the source design:

- the grid of RPUs with inter-RPU buffers and a host-written control path;
- the PE with west/north inputs, partial-sum path, small register file and
  MAC/ADD/PASS ALU;
- one array serving WS/OS, 1 × C_S SIMD, RADT and element-wise SIMD, with a
  row broadcast and a short cross-row tap;
- per-row delay insertion;
- a BRAM-style sparse queue with an address generator for indexed reads;
- a width-matched pipelined bitonic stage, a center buffer and a C_S → k
  merge;
- k up to 256;
- int8 data;
- compact nonlinear units;
- instruction blocks carrying mode, bounds, operand addresses, pruning
  options and dependency tags;
- draining the pipeline on a mode change;
- the 2 × 2 × (32 × 32) default size.

These are this design's own choices. The source gives no detail for them:

- all bit widths and encodings;
- the two-word PE register file;
- the OS unload scheme (drain, then shift);
- the adder-tree wiring and the lane-mask trick for odd tree sizes;
- the rank-based merger;
- the CB and SQB sizes and the almost-full rule;
- the address formulas of the SQB;
- the whole arithmetic of the nonlinear units (tables, Q7.8, isqrt);
- the buffer sizes (512 words each);
- the host port in place of AXI DMA;
- a hardware flag scoreboard for dependency tags (the source tracks
  dependencies in the host runtime);
- downward-only inter-RPU buffers without back-pressure;
- `row_grp` selection groups.

## 9. Limits

- LN and softmax work over the 32 lanes of one word. Longer rows would need
  a second pass that this RTL does not provide.
- RADT with P < C_S gives one partial sum per lane group. Combining the
  partial sums of rows longer than C_S is left to a following block.
- Results are written to BB in the order they leave the unit. OS results
  come out bottom row first, so BB word n holds row RS−1−n; top-k results
  are in descending order.
- Not included: the host processor and its runtime (template filling, the
  dependency-aware scheduling policy), the compiler, AXI DMA and external
  memory. The second top-k variant used on the smaller device (dual-layer) is
  not built either; this RTL follows the bitonic build.

## 10. Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. References are computed
independently in the testbench: integer models for the datapath, and
real-valued functions with a stated tolerance for the nonlinear units.

| testbench | covers |
|---|---|
| `tb_trine_pe` | every mode/operation of one PE against a model |
| `tb_trine_mse` | 8 × 8 array: OS, WS, 1 × C_S SIMD, RADT (several tree sizes and masks), normal SIMD |
| `tb_feed_skew` | per-lane delays, both directions |
| `tb_sparse_queue_buffer` | random push/pop against a queue model, address generation, row changes |
| `tb_bitonic_sorter` | order, permutation and latency (6 stages at N = 8) |
| `tb_topk_merger` | random groups, k and thresholds against a sorted reference |
| `tb_topk_engine` | top-k, sort-only and full bypass, with back-pressure |
| `tb_norm_unit`, `tb_act_unit`, `tb_nonlinear_unit` | numeric accuracy, latency, side-band flags |
| `tb_trine_rpu` | one RPU at 8 × 8 through its host port: OS, WS, OS + top-k into the SQB, RADT over the SQB, 1 × C_S SIMD, element-wise SIMD with ELU, IMPORT and forwarding, dependency tags (also covers `idex_unit`) |
| `tb_inter_rpu_buffer`, `tb_dep_scoreboard`, `tb_host_interface` | FIFO, flags and port decode against models |
| `tb_trine_top` | 2 × 2 grid at 8 × 8 PEs running a four-RPU program with dependencies, forwarding, row-wise top-k with back-pressure, SQB-driven RADT and SIMD, LN + GELU, and sort-only bypass; every mechanism is counted and must occur |
| `tb_workload_rpu` | two model layers on one 8 × 8 RPU: a pruned attention head (scores by OS, row-wise top-3 into the SQB, then only the kept 24 of 64 products of S·V in 1 × C_S SIMD) and a graph layer (edge aggregation from an SQB that the host refills while the block runs, then a WS combine) |
| `tb_trine_top_full` | the top at its default size: a 32 × 32 OS score tile with top-40 pruning into the SQB, followed by 40 sampled dot products in RADT mode |

Run any of them with plain Verilator from the repository root, for example:

```
verilator --binary --timing --assert -Irtl rtl/trine_pkg.sv tb/tb_trine_top.sv \
          --top-module tb_trine_top -Mdir obj_top && ./obj_top/Vtb_trine_top
```

The RTL lints cleanly apart from these warnings, which the Verilator
`-Wall` lint reports:

- unused signals and parameters, and a few output ports left open on
  purpose, such as FIFO counts that a parent does not read;
- `SYNCASYNCNET`, because the reset is used both as the asynchronous reset
  of the flops and in the `disable iff` of the assertions.

Neither is a circuit problem.
