# Folded bit-flipping decoder on the PG(3,GF(2)) point/hyperplane graph

Many iterative algorithms are message passing on a bipartite graph: two sets of
nodes take turns reading their neighbours' values, computing and writing new
values. If every node gets its own processor and memory, the design is fast
but large. This design *folds* the graph: a fold factor q lets one physical
processing unit (PPU) stand in for q logical nodes, and one physical memory
unit (PMU) hold the memories of q logical nodes. For the folded schedule to
work, three things must hold:

* every memory does at most two accesses per cycle (it is dual-ported);
* the wiring between the two sides stays fixed, with no crossbar;
* address generation is a counter (reads) or a small table (writes).

The graph used here is the incidence graph of the projective space PG(3,GF(2)).
It has 15 points and 15 hyperplanes, and each node has 7 neighbours. The
algorithm running on it is a hard-decision bit-flipping decoder for the
length-15 code whose parity checks are the hyperplanes. Folding by q = 3 leaves
5 point PPUs, 5 hyperplane PPUs and 5 + 5 PMUs.

## The graph and why folding works

After numbering, the graph is *circulant*: hyperplane h contains the points
`(HP0[t] + h) mod 15`, with `HP0 = {0,1,2,4,5,8,10}`. So point x lies on the
hyperplanes `(x - HP0[t]) mod 15`.

Edge t of a node is its t-th neighbour in order of cyclic distance. Logical
node r runs on PPU `r mod 5` in fold `r div 5`. Edge t of node r therefore
ends at the memory unit `(r + base[t]) mod 5`. This number depends only on
the PPU index, not on the fold. As a result, one static set of wires serves
all three folds.

Every edge is identified by its distance. All schedule tables in the design
are computed from `HP0` by constant functions in `pg_pkg` at elaboration time:

* the switch selections;
* the wire map;
* the write-address tables.

## Perfect access patterns and the step schedule

A node reads its 7 inputs two at a time. Pattern l consists of edges 2l and
2l+1. The degree is odd, so one *dummy edge* is added, giving 4 patterns. The
last pattern carries one real edge and one dummy edge. The dummy edge is never
written, and its input is flagged invalid so that the node ignores it.

The design uses the pattern-major order: the 12 steps of a phase are
`c = l*3 + k`, meaning pattern l for fold k. One iteration of the decoder is:

| phase | cycles | what happens |
|-------|--------|--------------|
| PW | 12 | Each point PPU writes its current bit on its edges 2l and 2l+1 into its own point memory (port 2 idles on the dummy edge). It also clears the check parities. |
| HR | 12 + 2 | Every point memory reads words 2c and 2c+1. The words pass through the switches and the wiring into the hyperplane PPUs, which XOR them into the parity of fold k. The last 2 cycles drain the 2-stage read pipeline. |
| HF | 1 | If no check is unsatisfied, or the iteration limit is reached, the decoder stops. |
| HW | 12 | Hyperplane PPUs write their parity on every edge into the hyperplane memories. Variable counters are cleared. |
| PR | 12 + 2 | Point PPUs count their unsatisfied checks. |
| PF | 1 | Every point whose count is at least THRESH (4 of 7) flips its bit. |

Adding these up, one iteration takes 54 cycles. Before the first iteration,
three input beats load 5 channel bits each: beat k carries nodes 5k..5k+4.
After the last iteration, three output beats return the decisions. From the
cycle after the last input beat to the first output beat is `28 + 54*iters`
cycles.

The published prototype needed 63 cycles per iteration. This design
overlaps less than the prototype did: write-back is not overlapped with
reading. The cycle count was not matched to the paper, so treat 54 as this
design's figure.

## Memory layout: where a word goes

Each PMU holds 24 words, arranged as 4 *bins* (one per pattern) of 2q = 6 words.
In bin l, fold k uses words `6l + 2k` (port 1) and `6l + 2k + 1` (port 2).
Reads are therefore a plain counter (`read_agen`): at step c, port 1 reads
word 2c and port 2 reads word 2c+1.

In a given pattern, two different readers take their words from the same PMU.
Port 1 serves the reader with the smaller PPU index. Sometimes both edges of
one pattern land in the same PMU; then port 1 carries edge 2l and port 2
carries edge 2l+1.

Writes are not linear. At write step c, a PPU emits edges `2(c div 3)` and
`2(c div 3)+1` of its node `(c mod 3)*5 + m`. Each word must land where its
*reader* will fetch it. `write_agen` keeps this as a table of 5 memories x
12 steps x 2 ports, computed by `pg_pkg::waddr`. A memory unit picks its row
with its `mu_id` strap.

The paper prints a fold-major write formula alongside a worked example, but
that example's own arithmetic is inconsistent. This design follows the
bin-per-pattern layout instead.

## Switches and wiring

Each PMU output pair goes through a `demux_switch` (2 to rho_hat wires). Each
PPU input pair comes from a `mux_switch` (rho_hat wires to 2). Both switches
are combinational and look up their selection by pattern number.
`pg_interconnect` joins them with fixed point-to-point wires: wire w of PPU i
comes from PMU `(i + off_w) mod 5`. It registers every wire once.

rho is the number of distinct memories a PPU reads; it is 5 on both sides.
When a pattern has both edges in the same memory, the switch needs one extra
wire, so rho_hat = rho + theta, where theta counts such patterns:

* Hyperplanes reading points: theta = 0, so rho_hat = 5.
* Points reading hyperplanes: pattern 0 (distances 0 and 5) has both edges in
  the same memory, so theta = 1 and rho_hat = 6.

The paper's prototype table lists 5 for both sides. This design follows the
rho + theta rule, so the point side has 6 wires per switch. Dummy and idle
wires carry a valid bit of 0 rather than going high-impedance.

Read-path timing is as follows:

* Cycle c: the memories take the read address.
* Cycle c+1: the data appears, and the demux switches route it using the
  pattern tag delayed by one cycle.
* Cycle c+2: after the wiring register, the mux switches select the data and
  the PPUs accumulate it into fold k.

The controller delays the pattern and fold tags to match.

## Node computations

* `check_ppu`: holds 3 parity bits, one per fold. An input pair is XORed into
  the selected fold's bit, and invalid (dummy) inputs are ignored. The parity
  is the message sent back on every edge. `unsat` is the OR of the 3 bits.
* `var_ppu`: holds 3 hard-decision bits and 3 counters. It counts incoming 1s
  (unsatisfied checks). On `flip_en`, every fold whose count is at least
  THRESH inverts its bit.

The decoding rule is this design's own choice: THRESH = 4 and MAX_ITER = 8,
with an early stop as soon as every check is satisfied. The paper names only
"hard-decision bit flipping". With THRESH = 4, every received word within
distance 1 of a codeword is corrected in one iteration.

## Control

`controller` is a state machine with a step counter:
IDLE, LOAD, PW, HR, HF, then (HW, PR, PF, PW, HR, HF) per iteration, then OUT.
It drives the following:

* the control words of the two memory columns (`en_use`, `rd_w_bar1`,
  `rd_w_bar2` per column, shared by all 5 memories);
* the switch enables;
* the delayed tags;
* the load, clear and flip strobes.

The paper's prototype used a microcode sequencer. An FSM produces the same
sequence.

## Interface of the top (`pg_fold_decoder`)

| port | dir | meaning |
|------|-----|---------|
| clk, rst | in | clock; synchronous active-high reset |
| in_valid / in_ready | in / out | input beat handshake. Beat k carries `in_bits[i]` = channel bit of node 5k+i. |
| out_valid, out_fold, out_bits | out | three output beats of decoded bits, fold 0..2 |
| done | out | pulse with the last output beat |
| converged, iters | out | the final word satisfied every check; number of flip iterations |
| busy | out | a word is in flight |

Parameters: `Q` = 3, `MAX_ITER` = 8, `THRESH` = 4. The graph size is fixed in
`pg_pkg`. `Q` must divide 15, which is checked at elaboration.

## Files

* `rtl/pg_pkg.sv`: constants and all schedule arithmetic.
* `rtl/read_agen.sv`, `rtl/write_agen.sv`, `rtl/mem_unit.sv`: memory unit and
  its address generators.
* `rtl/demux_switch.sv`, `rtl/mux_switch.sv`, `rtl/pg_interconnect.sv`:
  switching and wiring.
* `rtl/check_ppu.sv`, `rtl/var_ppu.sv`: node units.
* `rtl/controller.sv`, `rtl/pg_fold_decoder.sv`: control and top.
* `tb/`: one self-checking testbench per module.
  * `tb_ref_pkg.sv` rebuilds the graph from GF(16) arithmetic (x^4+x+1) as a
    reference that is independent of `pg_pkg`.
  * `tb_pg_fold_decoder.sv` runs the full-size decoder against a software
    bit-flipping model. It uses single, double and triple errors and random
    words, and checks the decoded bits, the iteration count and the latency
    `28 + 54*iters`.
  * `tb_pg_fold_decoder_e2e.sv` does the same with THRESH = 3 and
    MAX_ITER = 1. This makes the iteration-limit stop happen; that stop never
    occurs at the defaults. It counts each mechanism: dummy-edge writes,
    same-memory patterns, early stops, limit stops and flips.

## Simulating

```
verilator --binary --timing --assert -y rtl -y tb rtl/pg_pkg.sv tb/tb_ref_pkg.sv \
    tb/tb_mem_unit.sv --top-module tb_mem_unit -o sim
./obj_dir/sim
```

Every testbench prints `TB_RESULT checks=N failures=M`. The top's testbenches
do not need `tb_ref_pkg.sv`.

## Departures and limits

* **Cycle count.** One iteration takes 54 cycles here; the paper reports 63.
  The paper overlaps some levels of the pipeline. This design does not overlap
  the write phase of one side with the read phase of the other.
* **rho_hat.** The point side has rho_hat = 6, not the 5 of the prototype
  table (see "Switches and wiring").
* **Write layout.** Writes follow the bin-per-pattern layout rather than the
  printed write-back formula (see "Memory layout").
* **Sequencer.** The control is an FSM, not microcode.
* **Decoding rule.** THRESH, MAX_ITER, the early stop and the beat-wise I/O
  are this design's own choices.
* **Graph.** The graph is fixed at PG(3,GF(2)). Only `Q` is a free parameter,
  and it has been simulated only at 3. Other graphs need a new `HP0` and `J`
  in `pg_pkg`; the address and switch tables follow automatically.
