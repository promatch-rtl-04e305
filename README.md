# Promatch predecoder in SystemVerilog

A real-time surface-code decoder must finish each syndrome in about 1 µs. An
exact minimum-weight perfect matching (MWPM) decoder such as Astrea meets that
deadline only while the syndrome has few flipped bits: at most 10. Promatch is a
predecoder that sits in front of such a decoder. For a syndrome with more
flipped bits, it matches pairs of them itself, greedily and a few at a time,
until the rest is small enough for the main decoder to finish within the time
that remains.

The main idea is to avoid *singletons* while doing this. A singleton is a
flipped bit with no flipped neighbour left. Matching a singleton costs a long
and unlikely error chain, so a greedy choice that strands a bit is usually a
wrong choice. Promatch therefore classes every candidate pair by whether
matching it would strand a neighbour, prefers pairs that strand nobody, and
takes riskier pairs only when it has to. It also stops as soon as the main
decoder can cope. Low-weight syndromes are never touched.

This RTL implements the whole predecoder:

- subgraph extraction;
- the edge-processing pipeline with its singleton and step logic;
- the Step 3 path search;
- the round controller with its coverage check;
- the syndrome register;
- the final comparison against a parallel Astrea-G decoder.

The main decoder and Astrea-G are separate designs. They stay outside the top
module and connect through ports.

## The decoding subgraph and its two vertex properties

The decoding graph has one node per detector (a parity check in one
measurement round) and one edge for each single fault that flips two
detectors. Edge weights are −log probabilities, so lighter is likelier. For a
given syndrome, the *decoding subgraph* keeps only the flipped detectors and the
graph edges between them. Each round the design keeps two numbers for every
vertex i:

- `deg_i`: the number of live subgraph edges at i;
- `#dependent_i`: the number of i's neighbours whose degree is 1.

A neighbour of degree 1 can only be matched cheaply to i. If i is matched
elsewhere, that neighbour becomes a singleton.

In hardware the subgraph is held as:

- a **vertex array**: the detector index of each flipped bit, at most `MAX_V`
  = 64 entries;
- an **edges register**: up to `MAX_E` = 128 entries of {valid, vertex a,
  vertex b, weight};
- the **degree** and **#dependent** arrays.

`subgraph_generator` builds the first two. It takes one flipped bit per cycle
from the syndrome with a priority encoder. It then reads the edge table once per
(vertex, slot) and keeps each entry whose neighbour is also flipped.
`update_subgraph` recounts both property arrays from the edges register, degrees
in one cycle and dependents in the next. Matching a vertex clears the valid bit
of every edge that touches it, all in a single cycle.

## The step ladder

Each round, every live edge (i, j) is classed by two facts: whether i and j have
degree 1, and whether matching them would strand anyone (`No_Singleton`).

| step | condition | what is kept |
|---|---|---|
| 1   | both ends have degree 1 (an isolated pair) | all of them |
| 2.1 | No_Singleton, exactly one end of degree 1 | the lightest |
| 2.2 | No_Singleton, no end of degree 1 | the lightest |
| 3   | (not an edge) an existing singleton and a partner whose removal strands nobody | lowest path group |
| 4.1 | strands someone, exactly one end of degree 1 | the lightest |
| 4.2 | strands someone, no end of degree 1 | the lightest |

A round first applies isolated pairs, several at once. If the weight is still
too high, it applies one more pair: the first non-empty class in the order
2.1, 2.2, 3, 4.1, 4.2. Step 3 is considered only when 2.1 and 2.2 are both
empty. Applying a single pair and then re-evaluating is deliberate. A match
often turns a complicated cluster into isolated pairs, which the next round then
takes safely.

Two properties of this ladder show up in simulation.

- **Step 4.2 is never applied.** If some vertex has a dependent, that
  dependent's only edge is classed 1, 2.1 or 4.1, all of which rank above 4.2.
  If nobody has a dependent, then no edge strands anyone, so no edge is in
  class 4 at all. A 4.2 candidate can therefore exist only next to a
  higher-ranked one. The class is still built, as the algorithm defines it, and
  the testbenches see it filled.
- **A round always finds something while edges remain.** The edge of
  highest rank above always exists. The `stuck` flag exists for completeness,
  and testing has never raised it.

## Singleton and step detection (pipeline stages 2 and 3)

`singleton_detect` decides `No_Singleton` for an edge (i, j) from `deg_i == 1`,
`deg_j == 1`, `#dependent_i` and `#dependent_j`:

```
strand_j = (deg_i == 1) ? #dependent_j - 1 : #dependent_j
strand_i = (deg_j == 1) ? #dependent_i - 1 : #dependent_i
No_Singleton = (strand_i + strand_j == 0)
```

Matching i and j strands every degree-1 neighbour of either end, except the
partner itself. The −1 removes the partner when it is one of those dependents.
The two multiplexers, the adder and the zero test follow the published logic
diagram. Which multiplexer input belongs to which select value is this design's
reading.

This detector counts only degree-1 neighbours. It therefore misses one case: a
vertex of degree 2 whose two neighbours are exactly i and j (a triangle). Such a
vertex is stranded too. The design keeps the published logic unchanged. On the
square-lattice graphs used in testing, triangles do not occur.

`step_candidate_detect` is pure logic on the two degree-1 flags and
`No_Singleton`. The "exactly one end" term is the XOR of the two flags. The
"neither end" term is their NOR. Each of these is combined with `No_Singleton`
or with its inverse, giving S2.1, S2.2, S4.1 and S4.2. S1 needs both flags.

## The edge-processing pipeline

`edge_pipeline` accepts one edge per cycle and has four register stages:

1. look up the degrees and dependents of both ends, and test each degree for 1;
2. singleton detection;
3. step detection;
4. update the candidate stores.

In stage 4, an S1 edge is appended to the **isolated pairs register**. Any other
class is compared (strict `<`) with that class's entry in the **matching
candidates register** and replaces it if lighter. An edge offered in cycle t is
in the stores by the end of t+3. The published design clocks this pipeline at
250 MHz. The controller streams only live edges, so later rounds are shorter
than early ones, as intended.

## Step 3 and the path table

A singleton cannot be matched through a subgraph edge. Step 3 instead matches an
existing singleton j to the flipped bit i with the shortest path, provided i has
no dependents. The path table is an n × n on-chip table, n being the number of
detectors. Each cell stores the weight of the shortest path between two
detectors, reduced to one of four groups (2 bits; 0 is the shortest).

`step3_search` starts with every pass and runs beside the pipeline. It reads one cell per
cycle, for every singleton against every live vertex, and keeps the lowest
group. Ties go to the first pair found. The grouping rule itself is not fixed by
the hardware: whoever fills the table chooses it. The testbenches use
min(distance − 1, 3).

## The round loop and the time budget

`promatch_controller` runs:

```
IDLE -> (HW <= 10: bypass) | GEN -> UPD -> CHECK -> PASS -> DRAIN -> SELECT -> UPD ...
```

- **GEN** builds the subgraph.
- **UPD** refreshes the vertex arrays (2 cycles).
- **CHECK** asks `coverage_check` for the largest weight the main decoder can
  still finish in the time left. If the current weight is within it, the
  syndrome is handed on. If the budget is already spent, the run aborts.
- **PASS** streams the live edges.
- **DRAIN** waits for the pipeline to empty. It also waits for the Step 3
  search, but only if that result could be used: the isolated pairs must fall
  short of coverage, and Steps 2.1 and 2.2 must both be empty. Otherwise the
  search is stopped. This keeps the cost of Step 3 out of rounds that do not use
  it. On the dense test syndromes, waiting for the search on every pass would
  exhaust the budget for about one syndrome in seven.
- **SELECT** clears the matched bits and starts the next round.

In SELECT, the number of isolated pairs applied is at most
ceil((HW − target) / 2). Pairs beyond what coverage needs are left to the exact
decoder, which matches them optimally.

**Budget.** The budget is 240 cycles: 960 ns at 250 MHz. This leaves 10 cycles
of the 1 µs for the final comparison, as in the published design. The counter
`elapsed` runs from the end of subgraph generation and includes every round's
update, check, pass, drain and select cycles. The main decoder's latency for
each Hamming weight is the parameter table `LAT`. The default assumes 114 cycles
(456 ns) at weights 9–10 and smaller values below. Only the weight-10 figure
comes from Astrea's own publication. Replace the table for another main decoder.

**Overflow.** More than 64 flipped bits or 128 subgraph edges cannot be held. The
run then ends at once with `overflow`, and the syndrome goes on unmodified.

## Final choice against Astrea-G

With Astrea-G decoding in parallel, `solution_select` takes both answers, in
either order. Its total for Promatch is the prematched weight plus the main
decoder's weight. One cycle after both answers are in, it reports which solution
to use. A failed side loses, and on equal weight Promatch is kept. The Promatch
side counts as failed if the main decoder failed, or if predecoding overflowed or
aborted.

## Top-level interface and timing (`promatch_top`)

| port group | use |
|---|---|
| `et_wr_*` | load edge-table entries {valid, neighbour, weight}, one per cycle, before decoding |
| `pt_wr_*` | load path-table groups, one cell per cycle |
| `syn_valid`, `syn_in`, `ready` | offer a syndrome (`N_DET` bits) when `ready` is high |
| `md_valid`, `md_syndrome`, `md_hw` | one-cycle pulse: the (possibly reduced) syndrome for the main decoder |
| `pm_*` | prematched pairs (detector indices and the step of each) and status: `bypass`, `overflow`, `aborted`, `stuck`, `cycles`, `rounds` |
| `md_done`, `md_fail`, `md_weight` | answer of the main decoder |
| `ag_valid`, `ag_fail`, `ag_weight` | answer of Astrea-G (tie `ag_valid` high and `ag_fail` high when it is absent) |
| `sel_valid`, `sel_use_ag` | final choice |

A bypassed syndrome reaches `md_valid` 3 cycles after `syn_valid`. A predecoded
one needs:

- about n·(1 + `NBR_SLOTS`) cycles to build the subgraph, for n flipped bits;
- then, per round, the number of live edges plus about 8 cycles. When the
  round needs Step 3 and the search is longer, the search time counts instead.

## Parameters (`promatch_pkg`)

| name | default | origin |
|---|---|---|
| `D` | 13 | the larger of the two evaluated code distances |
| `N_DET` | (D²−1)/2 · (D+1) = 1176 | matches the published path-table size (1176² × 2 bit = 345 KB) |
| `HW_MAIN` | 10 | main decoder's weight limit, as published |
| `BUDGET_CYC` | 240 | 960 ns at 250 MHz, as published |
| `PATH_W` | 2 | four path groups, as published |
| `MAX_V` | 64 | own choice; 24 injected faults flip at most 48 bits |
| `MAX_E` | 128 | own choice |
| `NBR_SLOTS` | 8 | own choice; forward neighbours per detector in the edge table |
| `W_W` | 8 | own choice; edge-weight bits |
| `CNT_W` | 5 | own choice; degree/dependent counter bits |

For d = 11, set `D = 11` (N_DET = 720). A d = 11 graph also runs unchanged on the
d = 13 build: load it into the low 720 indices and leave the rest of the edge
table empty.

Storage at the defaults:

- **Path table:** 1176² cells × 2 bits = 345 KB, exactly the published size
  (129 KB for d = 11).
- **Edge table:** 1176 × 8 slots × 20 bits ≈ 23.5 KB. This is larger than the
  published 6 KB. The published row format is not known, and this one was chosen
  for a simple one-cycle lookup.

## Where this RTL departs from, or adds to, the published design

- Table layouts, widths and capacities (`MAX_V`, `MAX_E`, `NBR_SLOTS`, `W_W`,
  `CNT_W`) are not published. They are chosen here.
- The published text once gives 8-bit path-table cells, but also describes four
  path groups and quotes table sizes that match 2-bit cells. This RTL follows the
  2-bit version.
- The published pseudo-code writes a Step 4.1 edge into the Step 4.2 slot. The
  prose describes 4.1 and 4.2 as mirroring 2.1 and 2.2, and that version is
  built.
- Subgraph generation is not charged to the time budget. The published design
  hides table loading under syndrome extraction, and its cycle estimate counts
  only pipeline cycles.
- Only as many isolated pairs are applied as coverage needs. If that is not
  enough, one further pair is applied in the same round.
- The main decoder's latency table is assumed, apart from its weight-10 entry.
- The final comparison takes 1 cycle. The published design allows 10.
- There is no boundary node. The graph holds detector-to-detector edges only.
  Whoever loads the edge table decides how boundary faults are represented
  (they are simply absent here).
- The triangle case of singleton detection is not covered (see above).
- `overflow`, `aborted` and `stuck` are this design's exit flags.

## Verification

Each block has a self-checking testbench `tb/tb_<block>.sv`. It compares the
block against an independent model and prints
`TB_RESULT checks=<n> failures=<n>`.

The testbenches share `tb/tb_graph_pkg.sv`, a synthetic decoding graph:

- 14 rounds × 12 × 7 detectors;
- edges to the next column (weight 10), the next row (10) and the next round
  (12);
- path groups min(Manhattan distance − 1, 3).

This graph is a stand-in. It is not a circuit-level surface-code graph, and the
tests therefore exercise the logic, not decoding accuracy.

`tb_promatch_top` runs the whole design at its default size:

- it loads both tables in full, including the 1.38 M path-table cells;
- it decodes hand-built patterns and 300 random syndromes of 4–24 edge faults;
- for every syndrome, it checks the syndrome handed on, the pairs, adjacency, the
  residual weight, the bypass latency and the final choice;
- it counts each mechanism and fails if any never happened. The mechanisms are
  bypass, Steps 1, 2.1, 2.2, 3 and 4.1, a 4.2 candidate, multi-round runs,
  overflow, abort, and either final choice.

It takes under a minute with Verilator.

`tb_promatch_workloads` runs the two evaluated code sizes through the same
default build:

- d = 11: a 10 × 6 × 12 lattice, placed in detector indices 0–719;
- d = 13: a 12 × 7 × 14 lattice.

For each, it decodes 150 syndromes of weight above 10, made from 6 to 24
random edge faults. It checks the same invariants and prints how often
coverage was reached, the budget cycles used, and how often each step fired.
In a typical run, every syndrome reaches weight ≤ 10, using at most about 190
of the 240 budget cycles. Almost all pairs come from Step 1, and the rest mostly
from Step 2.1. The graphs are stand-ins, so these figures show the mechanism
working at size. They are not a measurement of accuracy.

To run any of them, for example:

```
verilator --binary --timing -Wno-fatal --top-module tb_promatch_top \
  rtl/promatch_pkg.sv tb/tb_graph_pkg.sv -y rtl -y tb tb/tb_promatch_top.sv
./obj_dir/Vtb_promatch_top
```
