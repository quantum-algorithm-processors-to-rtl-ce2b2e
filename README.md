# A register-parallel processor that lists the Hamiltonian circuits of a graph

A Hamiltonian circuit visits every vertex of a graph exactly once and returns
to where it started. Finding all of them is a hard search. This design does
not search. It keeps one small register for every candidate circuit and runs
a single fixed sequence of gates on all registers at once. At the end, the
registers that hold a real circuit have their flag bit set.

With n vertices and the circuit pinned to start at vertex 0, the candidates
are the (n-1)! orderings of the other vertices. A host computer writes one
ordering into each register. The chip then broadcasts a "wiring diagram" to
the whole array, one gate per clock, for about 8·k·m·n clocks (k bits per
vertex code, m edges). The run time depends only on the graph's size, not on
how many candidates there are. The array's size, however, grows as (n-1)!.

The architecture and its gate sequences follow J. R. Burger, *Quantum
Algorithm Processors to Reveal Hamiltonian Cycles*. In that paper the same
wiring diagram serves a quantum computer and a CMOS "quantum algorithm
processor". This RTL implements the CMOS version. It loads candidates in a
structured way, resets bits irreversibly, and reads its results out
deterministically. The RTL, its interfaces and its testbenches are an
independent implementation. The sections below separate what the paper
prescribes from what was chosen here.

## Contents

- [What a register holds](#what-a-register-holds)
- [The gate set](#the-gate-set)
- [One edge detector, gate by gate](#one-edge-detector-gate-by-gate)
- [Enables: keeping a vertex from being used twice](#enables-keeping-a-vertex-from-being-used-twice)
- [Closing the circuit](#closing-the-circuit)
- [The complete run](#the-complete-run)
- [Loading candidates and reading results](#loading-candidates-and-reading-results)
- [Sizes](#sizes)
- [Departures from the paper and choices made here](#departures-from-the-paper-and-choices-made-here)
- [Simulating](#simulating)

## What a register holds

Every register is a row of one-bit *lines*. For the default n = 5 and k = 3
there are 31 lines:

| lines | count | role | starts at |
|---|---|---|---|
| 0 .. nk-1 | nk = 15 | the candidate: vertex i of the circuit at lines i·k .. i·k+k-1, LSB lowest | loaded |
| nk .. nk+n-1 | n = 5 | pair result: pair i is vertex i → vertex i+1; pair n-1 closes back to vertex 0 | 0 |
| nk+n .. nk+2n-1 | n = 5 | enable, one per vertex *value* | 1 |
| next max(2k-1, n-2) | 5 | scratch pad | 0 |
| last | 1 | Hamiltonian circuit flag | 0 |

Packages `qap_pkg::bits_per_reg`, `pair_line`, `en_line`, `scr_line` and
`flag_line` compute this layout. Every module uses them, so the layout is
defined in one place.

## The gate set

A gate names its lines by index, and every register applies it to its own
copy of those lines (`qap_register`):

| opcode | effect | origin |
|---|---|---|
| `OP_NOTM` | invert every line whose bit is set in a mask (a NOT layer) | reversible |
| `OP_CN` | `t ^= a` | reversible (controlled NOT) |
| `OP_DCN` | `t ^= a & b` | reversible (double controlled NOT, Toffoli) |
| `OP_ZERO` | `t = 0` | irreversible, CMOS only |
| `OP_CZERO` | `if (a) t = 0` | irreversible, CMOS only |
| `OP_INIT` | pair results, scratch and flag to 0, enables to 1 | this design's start-of-run slot |

The two zeroing operations are what separate the CMOS processor from a
quantum computer. A quantum computer must keep every gate reversible. CMOS
can simply clear a bit, and this design uses that to reset an enable.

## One edge detector, gate by gate

An edge detector answers one question for one pair of a register: does the
pair hold the directed edge src → dst? If it does, the detector inverts the
pair's result line. The graph is undirected, so each edge u–v gets two
detectors, u→v and v→u. Every pair runs the detectors of every edge, which
makes 2·m·n detectors in a run. `detector_op_gen` generates the steps of one
detector. For k = 3, call the source code lines a,b,c and the destination
lines d,e,f (MSB first), and call the scratch lines s0..s4:

| step | gate | purpose |
|---|---|---|
| 0 | NOT layer on those of a..f where the edge code has a 0 | a matching pair now reads all ones |
| 1 | DCN(a,b) → s0 | |
| 2 | DCN(c,d) → s1 | |
| 3 | DCN(s0,s1) → s2 | |
| 4 | DCN(e,f) → s3 | |
| 5 | DCN(s2,s3) → s4 | s4 = AND of all six code lines |
| 6 | DCN(enable[src], s4) → pair result | the 7-input controlled NOT |
| 7 | CZERO(enable[src]) if s4 | one-shot enable reset, see below |
| 8..12 | steps 5,4,3,2,1 again | uncompute: scratch back to 0 |
| 13 | the step-0 NOT layer again | candidate restored |

For general k, the chain has 2k-1 DCNs. The detector takes 4k+2 slots, and
4k+1 for the closing pair, which has no enable (see below). The program for
an edge consists only of the NOT mask and the index of the enable line. The
same gates therefore serve every register. The registers differ only in
their data.

A pair holds exactly one directed edge or none. So at most one of a pair's
detectors can fire, and the pair result line ends as "this pair is an edge".

## Enables: keeping a vertex from being used twice

With permutations as candidates, no vertex can repeat, and the enables
change nothing. They matter when a register can hold any code, as it would
in a quantum computer that sweeps all nⁿ codes. Then a walk such as 1-2-1-2
uses only edges yet is not a circuit.

There is one enable per vertex. A detector for src → dst also requires
enable[src]. When a detector matches, the same slot that sets the pair
result zeroes enable[src] (step 7). The vertex has now been left once, so
any later pair that tries to leave it again fails. The paper's reversible
version remembers each use in a separate "hit" line, 2mn of them. The CMOS
version replaces those lines with this single irreversible clear.

The control for the clear is the detector's own match (s4), not the pair
result line. The pair result stays at 1 for all the later detectors of the
same pair, so it would also clear their enables.

With permutation candidates, the enables can be left out altogether. The
paper reaches the same conclusion. `ENABLES = 0` builds that reduced
register: 26 instead of 31 lines for the defaults. Every detector is then
built like the closing pair: a plain CN into the pair result, with no reset
step, so each takes 4k+1 slots. This build accepts bad cycles such as
1-2-3-1-4, and `tb_hc_no_enable` shows both outcomes.

The closing pair (vertex n-1 → vertex 0) is not gated. It must be able to
return to vertex 0, whose enable pair 0 has already cleared. This leaves a
gap when codes are arbitrary: a repeat of a vertex *in the last position* is
not caught. For example, 0-1-2-3-1 passes if all its steps are edges,
because only the sources of pairs 0..n-2 are guarded. Permutation loading
never produces such a candidate. Catching it would need a second enable
control on the destination of pair n-2, which the paper does not describe.

## Closing the circuit

After all detectors have run, a register holds a circuit exactly when all n
pair results are 1. `final_op_gen` ANDs them into the flag with a DCN chain:
DCN(p0,p1) → s0, DCN(s0,p2) → s1, …, and finally DCN(s(n-3), p(n-1)) → flag.
It then runs the n-2 scratch gates in reverse to clear the scratch lines.
This takes 2n-3 slots.

## The complete run

`qap_sequencer` produces the gate stream:

1. one `OP_INIT` slot;
2. for pair i = 0..n-1, for edge j = 0..m-1, for u→v then v→u: one edge
   detector;
3. the closing sequence.

The stream lasts 1 + 2m(4k+2)n − 2m + (2n−3) slots at one gate per clock
(1 + 2m(4k+1)n + (2n−3) with `ENABLES = 0`).
`done_o` pulses one cycle after the last slot. For the defaults with a
complete graph (m = 10) that is 1388 cycles, against the paper's estimate of
about 8kmn = 1200. The difference comes from each detector's two NOT layers
and its enable reset, plus the closing step.

## Loading candidates and reading results

`hc_qap_top` connects the sequencer, the register array (`qap_array`) and
the readout (`flag_readout`):

- **load**: `wr_en`, `wr_addr` and `wr_codes` write one candidate into one
  register. Vertex i goes in `wr_codes[i*k +: k]`. Producing the (n-1)!
  orderings is the host's job; the testbenches use lexicographic order.
- **graph**: `num_edges` and the lists `edge_u[j]`, `edge_v[j]`, with vertex
  codes 0..n-1 and no duplicate edges. Keep them stable while `busy_o` is
  high.
- **run**: a `start` pulse while idle. It also clears the readout.
- **results**: `any_flag_o` is the OR of all flags, which tells at once
  whether any circuit exists. `flag_valid_o` and `flag_index_o` present the
  lowest flagged register not yet read. `rd_next` moves to the next one and
  `rd_clear` starts over. `rd_addr` and `rd_codes` read any register's
  candidate back.

Every circuit is found twice, once in each direction. 1-2-3-4-5-1 and
1-5-4-3-2-1 sit in different registers.

Assertions check two rules: the edge count must fit the table, and no
candidate may be written while the processor is busy.

## Sizes

| parameter | default | meaning |
|---|---|---|
| `N` | 5 | vertices (the paper's worked example) |
| `K` | 3 | bits per vertex code (⌈log2 n⌉, as in the example) |
| `ENABLES` | 1 | build the one-shot enables; 0 for the reduced, permutation-only register |
| `MAX_M` | 10 | size of the edge table, n(n−1)/2 |
| `NUM` | (N−1)! = 24 | registers |

The hardware tests circuits of exactly N vertices. A 4-vertex graph needs a
build with `N=4, K=2, NUM=6`. The array grows factorially: n = 10 needs
362,880 registers of 69 lines, about 25 million flip-flops, and the paper's
own plot of total bits reaches 10⁶⁰ by n = 50. The RTL is written for any
size. The default is the size the paper works through by hand.

## Departures from the paper and choices made here

- **One gate per clock** with a broadcast opcode bus. The paper counts time
  slots but does not say how the CMOS processor schedules them.
- **Scratch lines**: the paper names both 2k−1 scratch lines (for the
  detector) and n−1 (for the closing AND). This design uses max(2k−1, n−2)
  scratch lines plus a separate flag line. The result is 31 lines instead of
  the paper's n(k+3)−1 = 29.
- **Enables kept by default.** The paper says in one place that structured
  initialization makes enables unnecessary, and in another counts the
  one-shot enable in the CMOS operation count. The default keeps them.
  `ENABLES = 0` gives the reduced version. For permutation candidates both
  produce the same flags.
- **Which enable gates a detector** (the source vertex's), and **what
  controls the one-shot reset** (the detector's match, not the pair result
  line): both are interpretations of figures that leave them open.
- **NOT layers** take one slot each. Scratch restore uses the reversible
  chain in reverse rather than the irreversible zero.
- **Not built**: the hit-register method. It is the reversible alternative
  to the one-shot enable, meant for a quantum computer. The initialization
  generator is also not built: the paper leaves it to an ordinary computer.
  The readout is a plain priority encoder with a read mask. The paper only
  asks for an OR and a one-at-a-time "multi-read", and leaves the circuitry
  open.
- **Edge list interface**, write and read ports, reset state, and the
  start/done handshake are this design's own.

## Simulating

Every file is SystemVerilog 2017. `rtl/qap_pkg.sv` must come first. With
Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl \
    rtl/qap_pkg.sv tb/tb_hc_pkg.sv tb/tb_hc_qap_top.sv --top-module tb_hc_qap_top
./obj_dir/Vtb_hc_qap_top
```

Each testbench prints one `TB_RESULT checks=N failures=F` line and checks
against models written independently of the RTL (`tb/tb_hc_pkg.sv`). Those
models are a gate model, a brute-force Hamiltonian test, and the enable rule.

| testbench | what it shows |
|---|---|
| `tb_hc_qap_top` | full default size: the 5-cycle, the example graph with and without its chords, K5 (all 24 flagged), random graphs, a graph with no edges, arbitrary codes, the bad cycle 1-2-3-1-4 rejected; exact cycle counts; every mechanism (matches, enable-blocked matches, enable resets, closing matches, multi-read, read-back) counted |
| `tb_hc_no_enable` | `ENABLES = 0`: same flags as the brute-force test for permutations, shorter run; the bad cycle passes, as expected without enables |
| `tb_hc_workload_n4` | N=4 build on K4: all six candidates flagged; the bad cycle 1-2-1-2 rejected |
| `tb_qap_sequencer` | gate stream applied to 16 model registers for random graphs; slot count formula |
| `tb_detector_op_gen` | a detector's outcome on random register contents, with and without enables; the gate order for k=3 |
| `tb_final_op_gen` | flag = AND of the pair results for all 32 patterns |
| `tb_qap_register` | random gates against the gate model |
| `tb_qap_array` | write/read ports; broadcast reaches every register |
| `tb_flag_readout` | OR and ordered multi-read |

To change the graph size, override `N`, `K`, `MAX_M` and `NUM` together.
`NUM` defaults to (N−1)!.
