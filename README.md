# A pipelined subgraph-matching kernel for FPGAs

Subgraph matching finds every embedding of a small query graph `q` in a large
labelled data graph `G`. An embedding maps each query vertex to a different
data vertex with the same label, so that every query edge becomes a data edge.
CPU algorithms do this by backtracking: they extend one partial result at a
time, and each step depends on the one before. That loop cannot be pipelined.

This RTL implements the FPGA side of the FAST approach (FPGA-based Subgraph
matching on mAssive graphs, by Jin et al.) in a different way:

* The host first builds a **candidate search tree (CST)**. This is a pruned
  index that holds every embedding.
* The host cuts the CST into pieces small enough for on-chip RAM and loads one
  piece at a time.
* The kernel then expands **thousands of partial results per round**, not one
  at a time. Each step is a streaming stage:
  * generate new partial results;
  * check that no data vertex is used twice;
  * check the non-tree edges;
  * collect the results.
* Every stage runs at the same time, and FIFOs join the stages.

The RTL covers the kernel in its final configuration: task parallelism plus
generator separation. Host software, the card's DRAM and PCIe are not built.
The kernel's ports are where they attach.

## 1. What the kernel works on

**Query in matching order.** The query vertices are renumbered `0 .. |V(q)|-1`
along the matching order. Position `n` is therefore also query vertex `n`.
Each vertex other than the root has a **tree parent** `cfg.parent[n]`, which
comes earlier in the order; the tree edges form a spanning tree of `q`.
Every other query edge is a **non-tree edge**. `cfg.nt_mask[n][m] = 1` means
vertex `n` has a non-tree edge to an earlier vertex `m`. `cfg.num_qv` is
`|V(q)|` and `cfg.root_cnt` is `|C(root)|`.

**CST.** The CST has two parts, both held in `cst_bram`:

* **Candidate lists:** `C(u)[i]` is the data-vertex id of candidate `i` of
  query vertex `u`.
* **Adjacency rows:** row `(u, u', i)` lists the indices `j` of the candidates
  `C(u')[j]` that are adjacent in `G` to `C(u)[i]`. There is one row for every
  tree edge and every non-tree edge, stored in both directions when needed.
  * A row holds up to `PORT_MAX` indices and a count.
  * The entries are laid out side by side, so that one BRAM read gives the
    whole row. All of them can be compared in one cycle.
  * The host must split any CST whose candidates have more than `PORT_MAX`
    neighbours along one query edge.

**Partial result.** A partial result stores, for each position mapped so far,
two things:

* `vid` — the data-vertex id, used for the injectivity check;
* `cidx` — the candidate index, used to address CST rows.

A **level-n** partial result has positions `0..n` mapped.

## 2. Rounds, levels and the N_O bound

The intermediate results buffer `ir_buffer` holds one stack per level,
`1 .. MAX_QV-1`, with `N_O` entries each. That is `(MAX_QV-1) x N_O` records,
all in BRAM with no DRAM spill. The kernel stays inside this space because of
two rules, both enforced by the generator and the controller:

1. **Deepest first.** Each round expands the deepest non-empty level
   (`round_controller`). A round on level `n` only writes level `n+1`. Level
   `n+1` was empty when the round began, because otherwise it would have been
   chosen. The root behaves as a virtual level 0, and only that level ever
   gets a round when all the stacks are empty: its candidates are read
   straight from `C(root)`, in order.
2. **At most N_O new partial results per round** (`tv_generator`). The
   generator pops `p_i` from the top of the chosen stack and emits all of its
   candidates for the next position. It stops before a `p_i` whose list would
   take the round past `N_O`.
   * If the very first list of a round is already larger than `N_O`, the
     generator emits the first `N_O` entries.
   * It keeps a per-level **resume offset**, and leaves `p_i` on the stack.
   * The next round on that level continues from the offset. The `split`
     output and the `splits` statistic count these cases.

Together these rules bound every level by `N_O`. `overflow` is a sticky flag
that would show a violation; the testbenches check that it stays low.

A round ends only when every `p_o` it emitted has been **retired** by the
synchronizer. The controller compares the synchronizer's collect count with
the generator's emitted count. Only then does it look at the level counts and
choose the next level. Rounds are therefore serialised, but inside a round all
the stages overlap.

## 3. The pipeline inside a round

```
             +--> t_v FIFO --> visited_validator --> b_v FIFO --+
tv_generator +--> tn_generator --> t_n FIFO --> edge_validator --> b_n FIFO --+--> synchronizer
   (p_o)     +--> p_o FIFO -----------------------------------------------+          |        |
      ^                                                                      ir_buffer   res_*
      +------------------- P_i (top of the chosen level) ------------------------+
```

**Generator (`tv_generator`).**
* To expand one `p_i` it:
  * reads the top record (1 cycle);
  * reads the tree-edge adjacency row `(parent(n), n, p_i.cidx[parent(n)])`;
  * decides how many candidates it can emit.
* It then issues one candidate per cycle:
  * a read of `C(n)[j]`;
  * one cycle later, the new record `p_o` with `vid[n]` and `cidx[n]` filled in.
* Each `p_o` goes into three FIFOs at once; this is the generator separation.
* It issues only while all three FIFOs have two free entries (`afull`), which
  covers the one cycle in flight.
* Overhead is four cycles per `p_i`, then one `p_o` per cycle.

**Visited validator.** `b_v = 1` when the new vertex `vid[n]` differs from
every `vid[0..n-1]`. It uses `MAX_QV` comparators in parallel, one register
stage and one result per cycle.

**T_n generator.**
* For each `p_o` it emits one edge task `t_n = (n, cidx[n], m, cidx[m])` for
  every set bit `m` of `nt_mask[n]`, lowest first, one per cycle.
* The last task of a `p_o` carries `last = 1`.
* A `p_o` with no non-tree edges produces no task.

**Edge validator.**
* It reads row `(n, m, cidx[n])` from the second port of the adjacency memory.
* It compares the row's first `cnt` entries with `cidx[m]` in parallel.
* It emits `b_n` with the task's `last` flag, two cycles after the task.

**Synchronizer.**
* It holds the head `p_o` until it has `b_v` and, if `nt_mask[n]` is non-zero,
  the `b_n` bits up to `last`. The `p_o` is valid if all the bits are 1.
* A valid, complete result (`n + 1 = num_qv`) goes out on
  `res_valid/res_data` and waits for `res_ready`.
* A valid partial result is pushed onto level `n+1` of the buffer.
* An invalid one is dropped.
* Every `p_o` counts as one retirement.
* Results keep their order through every FIFO, so no indices travel with the
  bits.

**Throughput.** When not stalled, each stage handles one item per cycle. With
`N` partial results and `M` edge tasks in a round, the round takes about
`max(N, M)` cycles plus pipeline fill. The generator's per-`p_i` overhead adds
to this. The source design estimates `N + max(N, M)` cycles for a whole
search. Here `N` counts every partial result produced and `M` every edge task.
* Over the 27 query runs of `tb_fast_kernel_queries`, the kernel needed
  579,068 cycles against an estimate of 568,729. That is within 2%, because
  the large runs dominate.
* Small runs pay the per-`p_i` and per-round overheads.
* The end-to-end testbenches bound every run by
  `N + max(N, M) + 5N + 24·rounds + 40`.
* `tb_fast_kernel_queries` also bounds the total by `1.25·(N + max(N, M))`.

## 4. Interface of `fast_kernel`

| Port | Dir | Meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset of control state (memories are not reset) |
| `cand_we, cand_wu, cand_wi, cand_wdata` | in | write candidate `C(u)[i]` |
| `adj_we, adj_wu, adj_wun, adj_wi, adj_wdata` | in | write adjacency row `(u, u', i)` (`adj_row_t`: `cnt` plus `PORT_MAX` indices) |
| `cfg` | in | `query_cfg_t`; stable from `start` to `done` |
| `start` / `busy` / `done` | in/out | one-cycle start; `done` pulses after the last retirement |
| `res_valid, res_data, res_ready` | out/out/in | complete embeddings (`presult_t`; `vid[k]` is the image of query vertex `k`) |
| `stats` | out | rounds, expanded `p_o`, visited failures, edge failures, results, result stalls, splits |
| `overflow` | out | buffer overflow (never expected) |

Load one CST partition while the kernel is idle, pulse `start`, and drain
results until `done`. Then repeat for the next partition.

## 5. Parameters and sizes

| Parameter | Default | Where | Note |
|---|---|---|---|
| `N_O` | 1024 | `fast_kernel`, `tv_generator`, `ir_buffer`, `round_controller` | results per round and per level; the source asks only for "thousands"; 1024 is this design's choice |
| `FIFO_DEPTH` | 16 | `fast_kernel` | depth of the six stream FIFOs; choice |
| `MAX_QV` | 8 | `fast_pkg` | query vertices; the evaluated queries have at most 7 |
| `VID_W` | 32 | `fast_pkg` | data-vertex id width; 187M vertices need 28 bits |
| `MAX_CAND` | 1024 | `fast_pkg` | candidates per query vertex in one CST partition |
| `PORT_MAX` | 16 | `fast_pkg` | adjacency entries per row, compared in parallel |

At the defaults the memories use about 13.5 Mbit:
* adjacency rows: 8·8·1024 × 165 bits;
* candidates: 8·1024 × 32 bits;
* buffer: 7·1024 × 336 bits.

A large FPGA card has far more BRAM than this. Every size is a package
constant or parameter; the other widths follow from them.

## 6. Where this RTL departs from, or adds to, the source design

* **Sizes are choices.** The source gives no numbers for `N_O`, `PORT_MAX`,
  the partition thresholds, the FIFO depths or any widths.
* **The root is virtual level 0.** It is not pushed whole into the buffer,
  which would not fit once `|C(root)| > N_O`.
* **Split lists.** A list longer than `N_O` resumes from a per-level offset.
  The source says only that the rest is "mapped later".
* **Validation bits** travel in their own FIFOs, in order. They are not stored
  as two bits next to each `p_o`.
* **Indices, not ids, in tasks.** Edge tasks carry candidate indices, so that
  the row address is direct.
* **Signal routing.** One block diagram of the source draws the T_n stream
  feeding the visited validator and the T_v stream feeding the edge validator.
  Its text says the opposite. The text is followed.
* **Results** stream out as they are found. The source collects them and
  flushes them to DRAM at the end; a DRAM writer on `res_*` does the same.
* **Host-side parts** (CST construction, partitioning, workload estimation
  and the CPU's share of the work) are software and are not here.

## 7. Files

`rtl/`:

| File | Contents |
|---|---|
| `fast_pkg.sv` | sizes and records |
| `stream_fifo.sv` | first-word fall-through FIFO |
| `cst_bram.sv` | candidate and adjacency memories |
| `ir_buffer.sv` | per-level stacks |
| `tv_generator.sv` | the generator |
| `tn_generator.sv` | the T_n generator |
| `visited_validator.sv` | the visited validator |
| `edge_validator.sv` | the edge validator |
| `synchronizer.sv` | the synchronizer |
| `round_controller.sv` | round control |
| `fast_kernel.sv` | the top |

`tb/`: one self-checking testbench per block, `tb_<block>.sv`, plus two
end-to-end benches.

* **`tb_fast_kernel`** runs with `N_O = 4` and 4-entry FIFOs, so that splits,
  full levels and back-pressure happen constantly.
  * It runs a small hand-made example with two embeddings, then 40 random CSTs
    and queries.
  * Each run is checked against a reference depth-first enumeration written
    in the testbench: results as a set, event counts and a cycle bound.
  * It fails if any mechanism never occurred: splits, full levels, visited and
    edge failures, result stalls and FIFO back-pressure.
* **`tb_fast_kernel_full`** is the same bench on the top at its default
  parameters.
* **`tb_fast_kernel_queries`** runs the nine LDBC-SNB query graphs
  `q0..q8` at the default parameters (3 to 7 query vertices, from paths and
  stars to triangles, 4- and 5-cycles and a 4-clique).
  * It builds each query over small random labelled graphs of rising density
    and derives a label-filtered CST from them.
  * It counts the embeddings a second time, straight from the graph.
  * At the densest graphs a run expands about 80,000 partial results in about
    100 rounds, and buffer levels reach `N_O = 1024`.

Every bench prints `TB_RESULT checks=<n> failures=<n>` and has a watchdog.

Simulate with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/fast_pkg.sv tb/tb_fast_kernel.sv --top-module tb_fast_kernel -o sim
./obj_dir/sim
```

Every bench finishes within seconds.

## 8. How far to trust it

* **Tested.**
  * Every block is tested alone against a model, with random stalls.
  * The kernel finds exactly the embeddings that a brute-force enumeration
    finds, on random inputs, at both small and default sizes.
  * For each block, a deliberately broken copy was run through its testbench;
    the bench caught it.
* **Not tested.**
  * Timing closure at 300 MHz.
  * Real CST partitions from a real graph.
  * Runs longer than a few thousand results.
