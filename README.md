# Streaming fixed-point COO SpMV for Personalized PageRank

Personalized PageRank (PPR) ranks the vertices of a graph by how relevant they
are to one chosen vertex. In a recommender only the order of the top results
matters, not the exact scores. So the scores can be kept in narrow unsigned
fixed point (Q1.25, 26 bits, by default), and the work becomes one streaming
sparse matrix-vector product per iteration. This RTL implements such an
accelerator. It follows the architecture published by Parravicini, Sgherzi
and Santambrogio ("A reduced-precision streaming SpMV architecture for
Personalized PageRank on FPGA"), targeting a Xilinx UltraScale+ card with
UltraRAM. Where that description stops, the RTL makes its own choices, and
these are listed below.

The core ideas:

* The graph is a **COO** edge list (destination `x`, source `y`, weight `val`),
  streamed from DRAM in 256-bit packets of **B = 8 edges**, one packet per
  clock.
* **KAPPA = 8** personalization vertices are computed together. Every edge is
  read once per iteration and updates all 8 PPR vectors.
* The PPR vectors live **on chip**, in two buffers: `P1`, the current vector,
  and `P2`, the SpMV result. Each is cyclically partitioned by B, so B
  consecutive vertices can be read or written in one cycle.
* Sums that belong to the same destination are reduced **inside the packet**.
  Finished blocks of B destinations are then written to `P2` **exactly once,
  aligned**, so there is never a read-modify-write on the buffer.

## The computation

With `X = (D^-1 A)^T` (column-stochastic transition matrix), dangling vector
`d` (1 where a vertex has no outgoing edge), personalization matrix `V`
(one 1.0 per column) and damping `alpha`:

    P_{t+1} = alpha * X * P_t  +  alpha/|V| * (d . P_t)  +  (1 - alpha) * V

One operation (`start` to `done`) runs these phases, sequenced by
`ppr_controller`:

| phase  | unit                      | work                                                         | cycles (about)          |
|--------|---------------------------|--------------------------------------------------------------|-------------------------|
| INIT   | `update_unit` (init mode) | `P1 = V`, `P2 = 0`                                           | ceil(\|V\|/B) + 2       |
| SCALE  | `scaling_unit`            | `scaling[k] = alpha/\|V\| * sum of P1[k,i] over dangling i`  | \|V\|/B + DRAM trips    |
| SPMV   | reader → scatter → aggregation → store FSM | `P2 = X * P1`                               | packets + stalls + ~6   |
| UPDATE | `update_unit`             | `P1 = alpha*P2 + scaling + (1-alpha)*V`, then `P2 = 0`       | ceil(\|V\|/B) + 2       |
| WRITE  | `ppr_writeback`           | stream `P1` out                                              | ceil(\|V\|/B) + 2       |

SCALE, SPMV and UPDATE repeat `cfg_max_iter` times. An iteration with no edge
packets skips SPMV. The edge stream dominates: for a graph with 10^6 edges it
is 125 000 cycles per iteration, against 25 000 cycles for each vector pass at
2·10^5 vertices.

## What the host must prepare

The accelerator relies on a specific input layout. Nothing checks the data at
run time, apart from simulation assertions.

1. **Edges sorted by destination `x`.** The store FSM walks destination
   blocks in increasing order. A block left behind is never reopened.
2. **Packing rule.** Every lane of a packet must satisfy
   `x[0] <= x[j] < x[0] + B`. The host fills packets greedily. It starts a new
   packet when the next edge would fall outside that range, and pads the rest
   of the old packet with dummy edges (`x = x[0]`, `y = 0`, `val = 0`). The
   last packet is padded the same way. Without this rule, edges could be lost
   whenever some vertices receive no edge at all. `tb_ppr_top` contains a
   reference packer (`build_graph`).
3. **Word layout.** Lane `j` of a 256-bit packet word is bits `[32j+31:32j]`.
   The x, y and val words of packet `n` are returned together by one response.
   `x` and `y` are vertex indices. `val = trunc(2^25 / outdeg(y))` sits in the
   low 26 bits of its 32-bit slot.
4. **Dangling bitmap.** Bit `b` of 256-bit word `w` is set when vertex
   `256*w + b` has no outgoing edge.
5. **Constants**, all unsigned Q1.25: `cfg_alpha`, `cfg_one_minus_alpha`,
   `cfg_alpha_over_v` (alpha/|V|). Also `cfg_pers[k]`, the KAPPA
   personalization vertices.

## The SpMV stream

The four SpMV stages form one pipeline with a **single stall signal**: the
store FSM's `in_ready`, called `en` in `ppr_top`. When `en` is high, the
scatter and aggregation registers advance and the reader's FIFO pops. When it
is low, everything holds, including the registered read data of `P1`.

**coo_packet_reader.** It issues packet-index requests on a valid/ready
channel. The DRAM returns responses in order and cannot be stalled, so the
reader keeps requests-in-flight plus buffered packets at or below
`FIFO_DEPTH` (8). With a 2-cycle memory this sustains one packet per cycle.

**scatter_core.** As a packet is accepted, its B source indices `y[j]` go to
`P1`. The buffer answers one cycle later with the KAPPA values of each source.
The next stage registers `dp[k][j] = trunc(val[j] * P1[k, y[j]])`.

**aggregation_core.** This stage reduces contributions that share a
destination. Let `x_s = floor(x[0]/B)*B` be the start of the block that holds
`x[0]`, and `off = x[0] % B`. Reduction `b1` (0 to B-1) adds every `dp[k][b2]`
whose `x[b2] == x[0] + b1`, and stores the sum at position `off + b1` of a
2B-entry vector `agg`. The packing rule keeps each destination inside
`[x[0], x[0]+B)`, so each lands at `x - x_s`, which is below 2B. The lower half
of `agg` belongs to block `x_s` and the upper half to block `x_s + B`. The
stage also reports `hi`, which says whether any lane landed in the upper half.

Example (B = 4): a packet with destinations `6 6 7 8` gives `x_s = 4` and
`off = 2`. Lanes 0 and 1 are summed into `agg[2]`, lane 2 goes to `agg[3]`
and lane 3 to `agg[4]`, which is the first slot of block 8. So `hi = 1`.

**store_fsm.** It keeps two accumulators per vector: `res1` for block
`x_s_old` and `res2` for the block after it. For each aggregate:

| condition                              | action                                                                 |
|----------------------------------------|------------------------------------------------------------------------|
| first aggregate of the pass            | `res1 = agg.lo`, `res2 = agg.hi`                                       |
| `x_s == x_s_old`                       | `res1 += agg.lo`, `res2 += agg.hi`                                     |
| `x_s == x_s_old + B`                   | write `res1` to block `x_s_old`; `res1 = res2 + agg.lo`; `res2 = agg.hi` |
| `x_s > x_s_old + B`, `res2` unused     | write `res1`; `res1 = agg.lo`; `res2 = agg.hi`                         |
| `x_s > x_s_old + B`, `res2` used       | write `res1`; `res1 = res2`, `x_s_old += B`; **stall one cycle**, then decide again |
| after the `last` aggregate             | flush `res1`, then `res2` if it was used; pulse `done`                 |

The published algorithm has only the first three rows. It shifts `res2` into
`res1` on every block change, which is correct only when the destination
advances by exactly one block. When a whole block receives no edge, that
shift would credit `res2`'s sums to the wrong block. The last three rows are
this design's fix. A gap costs at most one stall cycle. A block that gets no
edge is never written: it keeps the zero that the previous UPDATE (or INIT)
pass left in `P2`.

## PPR buffers (`ppr_buffer`)

Vertex `i` is stored in bank `i % B`, row `i / B`. One row word holds the
KAPPA values of that vertex. An aligned block write touches each bank once.
The scatter core needs B reads at arbitrary vertices per cycle. Each read lane
is therefore a full read port over all banks. Reads are registered (1 cycle)
and hold while `re` is low. On an FPGA, B random read ports mean replicating
the memory, or banking plus conflict handling. The published design does not
say how it serves these gathers. This RTL states the requirement plainly and
leaves the choice to the synthesis tool. Capacity: `MAX_V` = 200 000 vertices,
the largest graph the architecture was evaluated on. Two buffers hold
2 × 200 000 × 8 × 26 bits = 83 Mbit, about 30 % of the UltraRAM on the
target device, before any replication. An assertion in `ppr_top` flags a start with more than `MAX_V` vertices.

## Numerics

* All PPR values and constants are unsigned Q1.FRAC, with W = FRAC + 1 bits.
* Every multiplication truncates toward zero to FRAC fraction bits. The
  published design found rounding to nearest numerically unstable.
* Truncation only ever loses mass. In one iteration the loss is at most one
  LSB per edge product, plus about three LSBs per vertex, so the vectors sum
  to somewhat less than 1 on large graphs. On the 10^6-edge test graph it
  is about 0.92 after 10 iterations at Q1.25. The ranking is what matters,
  and it is affected far less.
* Sums are W-bit and wrap. The vectors are probability distributions, so an
  entry stays below 1.0 and does not wrap in practice. Only the scaling
  product saturates.
* The scaling accumulator has 8 guard bits.
* Other precisions are set with the `W`/`FRAC` parameters, e.g. `W=20,
  FRAC=19` for Q1.19.

## Top-level interface (`ppr_top`)

| port group | signals | notes |
|---|---|---|
| control | `start`, `busy`, `done`, `phase`, `iter` | `start` is a pulse; `cfg_*` must be stable until `done` |
| config | `cfg_num_vertices`, `cfg_num_packets`, `cfg_max_iter`, `cfg_alpha`, `cfg_one_minus_alpha`, `cfg_alpha_over_v`, `cfg_pers[KAPPA]` | |
| COO DRAM | `coo_req_valid/ready/addr`, `coo_rsp_valid/x/y/val` | `addr` is a packet index; responses arrive in order and cannot be stalled |
| bitmap DRAM | `dng_req_valid/ready/addr`, `dng_rsp_valid/data` | `addr` is a 256-bit word index |
| result | `out_valid/ready`, `out_blk`, `out_data[B][KAPPA]` | one block of B vertices per beat, blocks in order |

Parameters: `B` (8), `KAPPA` (8), `W` (26), `FRAC` (25), `MAX_V` (200 000).
The packet width is `32*B`. `B` must be a power of two.

DRAM, PCIe and the host driver are outside this RTL. The configuration ports
stand in for the host's register writes. The two DRAM read channels stand in
for the memory controller.

## Where this RTL departs from, or adds to, the published description

* The store FSM handles skipped destination blocks (stall and extra write)
  and flushes at the end of the stream; see above.
* The reduction layout requires the host packing rule above. The published
  text only says that a packet spans at most B destinations.
* `P2` is cleared by the UPDATE pass, block by block, behind the read. This is
  how "initialize to 0" is met in every iteration.
* The dangling factor is a separate pass over `P1` before each SpMV, as in the
  published algorithm. It is not overlapped with other work.
* Handshakes, FIFO depth, latencies, the bitmap and word layouts, runtime
  constants and reset behaviour (asynchronous, active-low `rst_n`) are this
  design's choices. The published description is silent on all of them.
* The published design runs its stages as separate modules joined by
  streams. Here the four SpMV stages form one pipeline advanced by a single
  enable. The throughput is the same, one packet per cycle, but a stall
  stops every stage at once.
* The 32-bit floating-point variant, which the original work only uses as a
  baseline, is not implemented.

## Simulation

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

    verilator --binary --timing --assert -Irtl -y rtl rtl/ppr_pkg.sv tb/tb_ppr_top.sv \
              --top-module tb_ppr_top -o sim && ./obj_dir/sim

Replace `tb_ppr_top` with any other testbench name. `tb_ppr_precision` also
needs `-y tb`, to find its helper module `tb_ppr_run`. Uninitialised state must
not matter: run with `+verilator+rand+reset+2` to check.

* `tb_ppr_top` runs the whole accelerator at its **default parameters**. The
  graph has 400 vertices and about 880 edges, with dangling vertices and runs
  of vertices without in-edges. The test does 10 iterations with
  alpha = 0.85, two operations with 8 personalization vertices each: one with
  an ideal memory and one with random DRAM back-pressure, random latency and
  a stalling result consumer. Every result is compared bit-exactly with a
  model of the same fixed-point recurrence, and every vector must sum to
  about 1. With the ideal memory the SpMV phase must take no more than one
  cycle per packet plus gap stalls and 12 cycles. The test counts how often
  each mechanism ran: gap stall, gap skip, same-block accumulate, next-block
  shift, res2 flush, pipeline stall, DRAM and output back-pressure,
  multi-edge reduction, dangling bitmap, init pass. Any mechanism that never
  ran is counted as a failure.
* `tb_ppr_workload` runs a graph the size of the evaluation graphs at the
  default parameters. It has 100 000 vertices and 959 295 random edges
  (mean out-degree 10, about 4 % dangling), packed into 119 912 packets. It
  runs 8 vectors and 10 iterations, and compares all 800 000 results
  bit-exactly. One operation takes 1.50 M cycles, of which the SpMV phase
  takes 119 923 cycles per iteration, so the stream runs at one packet per
  cycle. At 200 MHz this is 7.5 ms for 8 personalization vertices. The
  simulation takes a few seconds.
* `tb_ppr_precision` repeats the `tb_ppr_top` test at Q1.23, Q1.21 and
  Q1.19 (`tb_ppr_run` is its parameterised body).
* `tb_ppr_buffer`, `tb_coo_packet_reader`, `tb_scatter_core`,
  `tb_aggregation_core`, `tb_store_fsm`, `tb_scaling_unit`, `tb_update_unit`,
  `tb_ppr_writeback`, `tb_ppr_controller` test each unit against an
  independent model at small parameters. Where a rate is fixed, they also
  check cycle counts.

How far to trust it: the full datapath is checked bit-exactly against a
software model, at full buffer size. The tests use small graphs built to
reach every corner case, plus one random graph of 10^5 vertices and 10^6
edges. The real evaluation graphs (power-law, small-world, and the
co-purchasing and social networks) were not available. Nothing has been
placed and routed. The multi-port gather on the buffers is the part least
likely to map efficiently onto UltraRAM as written.
