# A P-coefficient accelerator for the ninth Dedekind number

The ninth Dedekind number D(9), the number of monotone Boolean functions of nine variables, can be
written as a sum over pairs of monotone functions of seven variables: a *top* alpha and a *bottom*
beta. For each pair the expensive part is

    S(alpha, beta) = sum over the 5040 variable permutations gamma of beta with alpha <= gamma
                     of 2^C(alpha, gamma)

where C(alpha, gamma), the *connector number*, is the number of connected components of the graph
`gamma AND NOT alpha`. Everything else (interval sizes, equivalence-class weights, deduplication of
dual pairs, the 128/192-bit final sums) is cheap and stays on the host.

This RTL computes S for a stream of bottoms against one top, and also returns the number of valid
permutations (those with alpha <= gamma), which the host can add up as a checksum of the transfer.
At its default size it has 10 pipelines with 30 CountConnected cores each (300 cores), the
organisation reported for the Stratix 10 implementation that was used for D(9).

## Representation

A monotone function of 7 variables is a 128-bit truth table: bit X, X read as a 7-bit subset of
{0..6}, is 1 when the function is true on X. `alpha <= gamma` is `(alpha & ~gamma) == 0`. The graph
handed to a core is `gamma & ~alpha`: the subsets on which gamma is true and alpha is false. This
set is convex (gamma is closed downward, NOT alpha upward), so two of its nodes lie in the same
component exactly when they can be joined by a chain of nodes each contained in the next or the
previous one. That is what lets the core work with closures instead of edge lists.

## The CountConnected core (`count_connected_core`)

The core holds two 128-bit registers, *leftover graph* L and *cur exploring* C, and a 6-bit count.
One flood-fill step per clock:

    up  = M_up(C)   & L        every node of L above the last batch
    nw  = M_down(up) & L       every node of L below those
    L  <= L & ~nw              explored nodes leave the graph immediately
    inc = (up == nw) || (L & ~nw) == 0
    C  <= inc ? fst(next L) : nw
    count += inc

`M_up` (`monotonize_up`) adds all supersets of a set of subsets, `M_down` (`monotonize_down`) all
subsets; each is seven shift-and-OR stages, one per variable. `fst` (`first_bit`) isolates the
lowest set bit (`x & -x`).

Why `up == nw` means a component is finished: after every step, `nw` is closed downward inside the
leftover graph, so nothing below an explored node is left behind; `up` catches everything above the
last batch. If the down-closure of `up` adds nothing, the next step could only reach nodes above
`up`, and those are above the previous batch, so they were in `up` already. A component therefore
produces exactly one `inc`. When L reaches zero (`done`), the result leaves on `out_count` and the
next graph is loaded in the same clock.

Timing: a graph accepted in cycle t gives its count in cycle t + 1 + I, where I is the number of
flood-fill steps (about 4.7 on average for the random graphs of the testbench). The implementation
used for D(9) reached 4.061 average iterations thanks to optimisations that are not described in
enough detail to reproduce; this core is the plain algorithm.

Two details differ from a literal reading of the published block diagram, where `fst` samples the
current leftover register and only `up == nw` counts: with that wiring a new seed can be a node of
the component just removed, and a component whose last step empties the graph would end with
`done` instead of `inc`. Here `fst` reads the next leftover value and an emptying step also counts.

## Generating the 5040 permutations (`permutation_generator`)

S_7 is split into 210 fixed *lanes* times the 24 permutations of variables 0..3. Each lane applies
a fixed coset representative to beta (variables chosen for positions 6, 5 and 4; pure wiring built
from at most six variable swaps). All lanes then step together through Heap's algorithm on
variables 0..3, one variable swap per step, decided by a shared factorial-base counter. A bottom
therefore takes 24 groups of 210 candidates, and each candidate is flagged valid when
`alpha <= gamma`. The split is set by the parameter `K_SEQ` (variables permuted in time; lanes are
7!/K_SEQ!). This structure is this design's own; the source only states that all 5040
permutations of every bottom are computed on the FPGA.

A variable swap on a truth table is three masked word operations: sets holding a but not b move up
by 2^b - 2^a, sets holding b but not a move down by the same amount (`swap_vars` in
`dedekind_pkg`).

## A pipeline (`pcoeff_pipeline`)

One bottom at a time: load it into the generator, then for each group hand the valid candidates to
the cores. Lane i is served by core i mod N_CORES; each ready core takes the lowest pending lane of
its set per clock, its graph being `gamma & ~alpha`. When every valid candidate of the group has
been handed out the generator advances; otherwise it stalls and the rest wait. Counts coming back
from the cores are added as `1 << count` to a 48-bit sum; the 13-bit valid count grows by the
number of candidates dispatched. After the last group the pipeline waits for all cores to finish,
then offers `{pcoeff_sum, valid_count}` until it is taken.

Latency: a bottom with no valid permutation takes 26 cycles from input transfer to `out_valid`
(24 groups, one drain cycle, one cycle to the output state). With valid permutations the cores set
the pace: about (valid permutations x (1 + I)) / N_CORES cycles.

Widths: 6-bit counts suffice because seven variables allow at most 35 components (the largest
antichain); 5040 x 2^35 < 2^48 bounds the sum; 5040 < 2^13 bounds the valid count.

## The accelerator (`dedekind_accelerator`)

N_PIPELINES pipelines share the bottom input and the alpha port. Bottoms go to the pipelines in
round-robin order and results are collected in the same order, so results come out in input order
without tags. `idle` is high when nothing is in flight; change alpha only then. Both streams are
valid/ready handshakes. Reset is synchronous, active low, everywhere.

| Parameter | Default | Origin |
|---|---|---|
| `N_PIPELINES` | 10 | ten pipelines on the die |
| `N_CORES` | 30 | 300 cores in all, divided over the ten pipelines |
| `K_SEQ` | 4 | own choice: 24 groups x 210 lanes per bottom |
| `NVARS`, `TT_W` | 7, 128 | D(9) is computed from functions of 7 variables |
| `COUNT_W` | 6 | width of the core's count output |
| `SUM_W`, `VCOUNT_W` | 48, 13 | own choice, overflow-free bounds above |

Outside this RTL, and only represented by the two streams: the PCIe transfers and board logic, the
on-board DDR buffers holding millions of bottoms per top, and the host software.

## How far it can be trusted

Every block has a self-checking testbench that compares against models written differently from the
RTL (subset-test closures, breadth-first search over hypercube edges, permutations from Lehmer
codes):

* `tb_monotonize_up`, `tb_monotonize_down`, `tb_first_bit`: fixed and random sets.
* `tb_count_connected_core`: 300 convex graphs back to back, up to 19 components; checks each count
  and each latency (1 + flood-fill steps).
* `tb_permutation_generator`: the 5040 candidates of three bottoms are exactly the 5040 permutations
  (multiset comparison), every valid flag, `last`, and holding while `advance` is low.
* `tb_pcoeff_pipeline`: 13 bottoms against the full reference sum, including a bottom with no valid
  permutation (exact 26-cycle latency), `beta = alpha`, output back-pressure and generator stalls.
* `tb_dedekind_accelerator`: the whole accelerator with 3 pipelines of 6 cores, random input gaps
  and output back-pressure; results checked in order, and each mechanism (input and output
  back-pressure, generator stall, bottoms with no valid permutation, an empty graph, round-robin
  wrap) must occur at least once.

The largest configuration simulated is 3 pipelines of 6 cores. The default 10 x 30 configuration
lints and elaborates, but building it for simulation with Verilator takes longer than ten minutes,
so no end-to-end test runs at the default size. The clock rate of 450 MHz reported for the FPGA
build is a property of that implementation and cannot be judged from this RTL; nor is there any
evidence here that the permutation generator and dispatcher would meet it.

## Simulating

All files are plain SystemVerilog. Example for the pipeline test:

    verilator --binary --timing --assert -Irtl -y rtl \
        rtl/dedekind_pkg.sv tb/tb_ref_pkg.sv tb/tb_pcoeff_pipeline.sv \
        --top-module tb_pcoeff_pipeline -o sim
    ./obj_dir/sim

Each testbench prints `TB_RESULT checks=N failures=M` and stops; a watchdog ends it with a failure
if the design hangs. Verilator is two-state: every register that is read is reset.
