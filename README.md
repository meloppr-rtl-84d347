# MeLoPPR graph-diffusion accelerator

Personalized PageRank (PPR) ranks the nodes of a graph by their relevance to
one seed node. The score of a node v is the probability that a random walk
from the seed stops at v, where the walk goes on at each step with
probability alpha and stops with probability 1 - alpha. With walks of at most
L steps, the scores follow from *graph diffusion*:

    S_{l+1} = (1 - alpha) S_0 + alpha W S_l
    S_L     = (1 - alpha) * sum_{k<L} alpha^k W^k S_0  +  alpha^L W^L S_0

Here S_0 is one at the seed and zero elsewhere. W = A D^-1 is the
random-walk matrix: a node hands its score in equal parts to its neighbours.
The answer to a query is the k nodes with the largest entries of S_L.

A direct computation needs the whole L-hop neighbourhood of the seed in
memory, and that grows exponentially with L. The MeLoPPR method splits it:

* **Stage decomposition.** A diffusion of depth L = l1 + l2 equals a depth-l1
  diffusion from the seed, minus alpha^l1 times its residual
  S^r = W^l1 S_0, plus alpha^l1 times a depth-l2 diffusion started from that
  residual.
* **Linear decomposition.** Diffusion is linear, so the second stage can be
  run separately from each node v that has a non-zero residual. Each run
  uses only the small l2-hop sub-graph around v.
* **Sparsity.** Most residuals are nearly zero. Running the second stage
  only from the nodes with the largest residuals trades precision for time.

The RTL here is the accelerator side of a CPU + FPGA split. The host does the
BFS that extracts each sub-graph and chooses the next-stage nodes. The
accelerator runs each diffusion on P processing elements (PEs). It keeps the
running top-ranked scores on chip, so the host never receives a full score
vector: only candidate next-stage nodes after stage one, and the top k at the
end.

The default configuration follows the paper's main one:

| Item | Value |
| --- | --- |
| PEs (`P`) | 16 |
| Score width | 32-bit unsigned integer |
| `alpha` | `alpha_p / 2^10`, with `alpha_p` a 16-bit value |
| Global table | c*k = 10 * 200 = 2000 entries |
| Query result | top k = 200 |
| Depth per stage | l1 = l2 = 3 (chosen by the host) |

## Integer arithmetic and the weights

This part needs the most care.

**Scores are integers.** The host gives the seed a large integer `Max`; the
paper uses Max = d * |G_L(s)|, with d half the largest degree. Every later
score is an integer share of that mass. The test host multiplies this by a
further 2^Q. On small balls d * |G_L(s)| is only a few hundred, and
truncation by the degree divisions and the Q-bit shifts would wipe out most
scores within three steps. With 32-bit scores the extra factor still leaves
room: the total mass never grows.

**Propagation divides and truncates.** Node u with residual r(u) and degree
d_u sends `r(u) / d_u` (integer division) to each neighbour. The truncation
remainders are lost, so total mass can only shrink.

**Weights come from shifts.** With `Q = 10`:

    a_0     = 2^Q
    a_k     = (a_{k-1} * alpha_p) >> Q           (alpha^k, truncated)
    coef_k  = ((2^Q - alpha_p) * a_k) >> Q       for k < l
    coef_l  = a_l   in a final stage,  0  in a first stage

**The accumulated score.** After the accumulate pass of step k, every node
holds:

    pi^a(v) += (coef_k * r_k(v)) >> Q,      r_k = W^k S_0   (integer)

Over steps 0..l this sum is the integer form of the S_l formula above.

**A first stage leaves out its last term.** In a first stage the
alpha^l W^l S_0 term is given weight 0. This is the same as subtracting
alpha^l1 * S^r in the stage decomposition.

**What the drain returns.** It sends each node with a non-zero residual to the
host together with `(a_l * r_l(v)) >> Q`. That value is alpha^l1 * S^r[v],
and two things follow from it:

* Sorting by it is the same as sorting by the residual, which is the
  paper's rule for choosing next-stage nodes.
* Used as the seed score of a final-stage run from v, it makes that run's
  pi^a equal to alpha^l1 * GD^(l2)(S^r_v) directly.

**The global table adds everything up.** It sums the first-stage pi^a and
every final-stage pi^a without any further scaling. A result is therefore the
multi-stage PPR vector, in units of Max, minus the truncation losses.

The paper's worked example uses alpha = 1/10 and prints
S_1 = [1/10, 3/10, 3/10, 3/10]. That is `alpha S_0 + (1 - alpha) W S_0`, with
the roles of alpha and 1 - alpha swapped relative to the equation. This
design follows the equation, in which alpha is the probability of
continuing. A host that wants the other convention passes
`alpha_p = 2^Q - alpha_p`.

## Architecture

```
 host words ──► stream_if ──► loader writes (per-PE enables) ─┐
     ▲              │ run / clear / topk                      ▼
     │              ▼                             ┌──── pe[0..P-1] ─────────────┐
     │        diffusion_ctrl ─ start / coef ─────►│ subgraph_table  diffuser ───┼─► req
     │         │  ▲    ▲                          │ acc_score_table accumulator │
     │         │  │    └── busy ──────────────────│ res_score_table (2 banks) ◄─┼── upd
     │         │  └ drain (gid, pi^a, r) ─────────└─────────────────────────────┘
     │         ▼                                        scheduler: req ─► upd,
     │   global_score_table (c*k entries)               round-robin per PE
     └──── candidates / top-k / DONE
```

**Node placement.** The host numbers the nodes of each sub-graph 0..n-1 in
the order it sends them; the seed is 0. Node v lives in PE `v mod P` at
address `v div P`. This interleaving spreads every sub-graph evenly over the
PEs.

**What a PE holds.** Each PE has five parts:

* **Sub-graph table.** For each node, the first and last address of its
  neighbours (inclusive), followed by the neighbour list of local ids.
* **Accumulated-score table.** The node's global id and pi^a.
* **Residual table.** Two banks: `cur` is read during a propagation, `next`
  collects the shares being sent. After each accumulate pass the banks swap.
* **Diffuser.** Walks the PE's nodes. For a node with a non-zero residual it
  divides once, then sends one write request per neighbour, one per cycle.
* **Accumulator.** After each propagation it sweeps the PE's nodes once. For
  each node it adds `(coef * next) >> Q` to pi^a and clears the old `cur`
  entry. It then swaps the residual banks.

**Scheduler.** Any diffuser may write into any PE's residual table, and each
table takes one update per cycle. The scheduler routes each request to the
bank `dest mod P`. For each bank it grants the first requester at or after
a round-robin pointer; the others stall. These stalls are the scheduling
overhead measured by the parallelism study (see the testbenches).

**Controller.** For each RUN it:

1. Runs accumulate pass 0. The seed was written into `next`, so step 0 looks
   like any other step.
2. Then, `depth` times: runs a propagation until every diffuser is idle, then
   an accumulate pass with coef_k.
3. Finally drains every PE entry. A non-zero pi^a goes to the global table;
   if emission is enabled, a non-zero residual goes to the host.

**Global score table.** A new (id, score) is compared with the used entries,
one per cycle:

* **Match:** if the id is already there, the scores are added.
* **Append:** otherwise, while there is room, it is appended.
* **Evict:** when the table is full, the new score replaces the smallest
  entry if it is larger.
* **Drop:** otherwise the new score is discarded.

TOPK makes k passes over the table. Each pass picks the largest entry not
yet sent; on a tie, the lower index goes first.

## Host protocol

Every word is a `host_word_t {op[2:0], a[31:0], b[31:0]}` with valid/ready.
The types are in `meloppr_pkg`.

| op | a | b | effect |
| --- | --- | --- | --- |
| CFG | `alpha_p[15:0]`, `depth[19:16]`, final `[20]`, emit `[21]` | – | starts a new sub-graph (node and neighbour counters reset) |
| NODE | global id | degree d | next local node; the d words that follow must be NBR |
| NBR | neighbour's local id | – | appended to the owning PE's neighbour list |
| SEED | local id | score | initial score of one node |
| RUN | – | – | diffuse, fold pi^a into the global table, emit candidates |
| CLEAR | – | – | empty the global table |
| TOPK | – | – | stream the top k |

The accelerator answers with `out_word_t {tag, a, b}`:

| tag | a | b |
| --- | --- | --- |
| `TAG_RES` | id of a next-stage candidate | alpha^l1-weighted residual |
| `TAG_TOPK` | id of a result node | its score |
| `TAG_DONE` | the op that ended | – |

Beside the streams, the top has status outputs:

* `stall_ctr`: lost write arbitrations.
* `n_iter`: propagations run.
* `n_res_sent`: candidates sent.
* `gst_match`, `gst_insert`, `gst_evict` and `gst_drop`: the global table's
  match, insert, evict and drop counts.
* `gst_used`: how many global-table entries are in use.
* `n_loaded`: the size of the current sub-graph.
* `n_reads`, `n_writes` and `n_skips`: the nodes read, writes granted and
  nodes skipped by all diffusers in the latest propagation.

RUN, CLEAR and TOPK each end with a `TAG_DONE`. The DONE of a RUN is sent
only after the global table has taken in the last drained score, so the
status outputs are final when the host sees it. No command is taken before
then.

One query runs as follows:

1. Send CLEAR.
2. Send the first stage: CFG with depth l1, final = 0 and emit = 1; the BFS
   ball of depth l1 around the seed as NODE/NBR words; `SEED(0, Max)`; RUN.
   Collect the `TAG_RES` words.
3. Choose the next-stage nodes with the largest values.
4. For each chosen node v: send CFG with depth l2, final = 1 and emit = 0;
   the ball of depth l2 around v; `SEED(0, value of v)`; RUN.
5. Send TOPK and read the result.

The degree sent with a node is its number of neighbours inside the
sub-graph. Within a BFS ball of depth l, every node that propagates during
the l steps has all its neighbours in the ball, so this matches the true
degree.

## Timing

Each cost below is in clock cycles (the paper's board runs at 100 MHz).

| Step | Cycles |
| --- | --- |
| Load | one per host word |
| Accumulate pass | nodes per PE + 2 (all PEs in parallel) |
| Propagation | the slowest PE's nodes + its granted writes + 1, plus stalls from write conflicts |
| Drain | one per node of the sub-graph, longer under back-pressure |
| Global table, one score | used entries + 2 |
| Top-k readout | about k * (used entries + 2) |

The global table's sequential scan is the simplest circuit that does the job.
With a full 2000-entry table, each score takes about 2000 cycles, which is
slow. It is the first place to widen if the throughput matters.

All tables are written at the clock edge and read asynchronously. This lets
the diffuser and the accumulator read and update one entry per cycle with no
read pipeline. On an FPGA this maps to distributed RAM, or to block RAM with
an added read stage.

## Sizes and capacity

Parameters of `meloppr_top`:

| Parameter | Default | Origin |
| --- | --- | --- |
| `P` | 16 | paper |
| `NODES_PE` | 2048 | this design |
| `EDGES_PE` | 8192 | this design |
| `GST_SIZE` | 2000 | paper (c*k) |
| `TOP_K` | 200 | paper |

**Per-PE depths.** 2048 nodes and 8192 neighbour entries per PE come to
about 1.2 MB over 16 PEs. That is close to the 72.8% of KC705 block RAM the
paper reports at P = 16.

**Totals.** One sub-graph can have up to 32,768 nodes and 131,072 neighbour
entries, where each undirected edge takes two entries. No single PE may
receive more than 8,192 entries, and no node may have a degree of 8,192 or
more.

**Paper's graphs.** Measured by the paper's own per-sub-graph memory
figures, the largest sub-graphs of citeseer, cora, pubmed and com-amazon fit.
The largest ones of com-dblp (1.6 MB) and com-youtube (42 MB) do not.

## Files

**Package.** `rtl/meloppr_pkg.sv` holds the widths, the default sizes, the
word formats and the `scale()` helper.

**Modules**, bottom-up:

* `subgraph_table`
* `acc_score_table`
* `res_score_table`
* `diffuser`
* `accumulator`
* `pe`
* `scheduler`
* `global_score_table`
* `diffusion_ctrl`
* `stream_if`
* `meloppr_top`

Each file opens with a description of its interface and timing, and of what
is taken from the paper and what is this design's choice.

**Testbenches** (`tb/`). Each module has a self-checking testbench,
`tb_<module>.sv`, that ends with a `TB_RESULT checks=… failures=…` line.

* `tb_host.sv` models the host processor. It builds a random graph, runs
  whole queries and checks every returned word against a bit-exact integer
  model of the same computation. This includes the drain order and the
  global table's replacement rule.
* `tb_meloppr_top` runs the end-to-end test at reduced size: 4 PEs and a
  16-entry table, so that evictions happen. It requires write-conflict
  stalls, table matches, inserts and evictions, candidate emission, and both
  stage modes.
* `tb_meloppr_full` runs the default-size design on a random graph of
  citeseer's size (3327 nodes, 4676 edges), with one query and eight
  next-stage nodes.

* `tb_meloppr_scaling` is the parallelism study. It runs three two-stage
  queries on the same citeseer-sized graph through five copies of the
  design, with P = 1, 2, 4, 8 and 16, and everything else at its default.
  It measures the cycles in which the diffusers or accumulators are busy,
  and compares them with a conflict-free bound: the busiest PE's reads plus
  writes, per propagation. Latency must fall at every doubling of P. The
  measured cycles are in the table below; the ms column is at 100 MHz.

  | P | diffusion cycles | ms | overhead from write conflicts |
  | ---: | ---: | ---: | ---: |
  | 1 | 8,883 | 0.089 | 0 % |
  | 2 | 4,944 | 0.049 | 2.4 % |
  | 4 | 2,834 | 0.028 | 3.7 % |
  | 8 | 1,752 | 0.018 | 4.3 % |
  | 16 | 1,240 | 0.012 | 3.8 % |

  That is a 7.2x speed-up from 1 to 16 PEs, against the over 10x the study
  reports. The 3-hop balls of the random graph hold only 27–47 nodes, so at
  P = 16 each PE owns 2–3 nodes. The fixed cost of each pass (about 3
  cycles) then weighs as much as the work.

* `tb_meloppr_precision` trades next-stage nodes for time. It runs one query
  on the citeseer-sized graph through three default-size copies, using 0, 8
  and all 21 next-stage candidates. Precision must not fall as more nodes are
  used. Measured against a double-precision PPR of depth 6:

  | next-stage nodes | top-200 precision | cycles for the query |
  | --- | --- | ---: |
  | 0 | 4 % | 323 |
  | 8 | 68 % | 59,827 |
  | all 21 | 98.5 % | 279,625 |

  Most of the cycles are the global table's sequential scan.

All end-to-end tests also print the top-k precision against a
double-precision PPR of depth 6 over the whole graph. This number is for
information and is not checked; on the test graphs it was 136/200 at full
size and 6–8 of 8 at reduced size.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/meloppr_pkg.sv rtl/*.sv \
          tb/tb_host.sv tb/tb_meloppr_full.sv --top-module tb_meloppr_full
./obj_dir/Vtb_meloppr_full
```

For a unit test, list the package, the module and its testbench, for example
`rtl/meloppr_pkg.sv rtl/diffuser.sv tb/tb_diffuser.sv --top-module tb_diffuser`.

## Where this design departs from the paper, or fills gaps

**Decided here.** The paper does not describe these, so they are this
design's choices:

* the word format and command set of the streaming interface;
* the interleaved node-to-PE mapping (the paper's block diagram shows each
  PE holding a contiguous group of nodes);
* round-robin arbitration in the scheduler;
* the two-bank residual table (the paper counts one word per node for it);
* the on-chip sequencing of a diffusion;
* the replacement rule of the global table when it is full;
* skipping nodes whose residual is zero or that have no neighbours;
* asynchronous table reads.

**Two labels in the paper's block diagram are not explained there.** Here is
how each is handled:

* **"Local aggregate" inside the diffuser.** It is read here as adding each
  share into the destination's residual entry.
* **The diffusers' read/write counters wired to the scheduler.** They are
  kept as counters. The scheduler ends a propagation using the diffusers'
  busy flags instead.

**Cross-PE writes go to the residual tables.** The paper's block diagram
draws the lines that cross between PEs from each diffuser to the
accumulated-score tables. The text says only that diffusers write to all
the score tables. Here the cross-PE writes carry the propagated shares into
the residual tables, because the residual is the quantity that spreads. The
accumulator alone updates pi^a, inside its own PE.

**Speed-up in the parallelism study.** It is lower than published; the
testbench notes above give the numbers and the reason.

**Not built.** These are outside this RTL:

* the host's BFS and the selection of next-stage nodes, which are software;
* the physical CPU–FPGA link (DMA or AXI);
* the extra parallelism of running several next-stage diffusions at once,
  which the paper leaves for future work.

**Not reproduced.** The resource figures (LUT and BRAM use) and the
latencies in milliseconds cannot be reproduced without an FPGA flow.
