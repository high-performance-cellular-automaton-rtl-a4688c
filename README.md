# SCALA: local cellular-automaton decoders for the repetition and toric codes

A quantum error-correcting code gives a syndrome: the stabilizer
measurements that came out -1. These form *defects*, and the decoder must pair
defects up and flip the qubits between them. Decoders such as
minimum-weight matching do this with global knowledge of the syndrome. The
decoders here do it with no global view. Every stabilizer site holds a tiny
finite-state cell that talks only to its nearest neighbours. The cells are
updated together once per clock step, and the correct pairing emerges from
that local traffic.

The scheme is the *Signaling Cellular Automaton with Local Attraction*
(SCALA) from "High-performance cellular automaton decoders for quantum
repetition and toric code". Its idea fits in one sentence: a defect
announces itself with signals that run outwards at one cell per step, and a
lone defect that receives a signal steps one qubit towards the cell that sent
it. Two defects therefore walk towards each other and annihilate, and
closer pairs meet first. On the periodic repetition code this reproduces an
exact majority vote. On the toric code it reaches a code-capacity threshold
of about 7.5 %.

This repository holds synthesizable SystemVerilog for both automata, the
signal-reset schedules that go with them, and a top level that puts a
repetition-code decoder and a toric-code decoder pair side by side. It also
holds self-checking testbenches for all of these.

## Files

| file | content |
|---|---|
| `rtl/scala_pkg.sv` | shared types: signal and flip structs, schedule-mode enum, `popcount4` |
| `rtl/scala1d_cell.sv` | one repetition-code cell |
| `rtl/scala1d_array.sv` | ring of `D` cells (default 81) |
| `rtl/scala2d_cell.sv` | one toric-code (plaquette) cell |
| `rtl/scala2d_array.sv` | `D` x `D` torus of cells (default 81) |
| `rtl/reset_scheduler.sv` | global signal-reset schedule: none, periodic, ramp |
| `rtl/scala_top.sv` | top: 1D decoder + two 2D arrays (X and Z errors) |
| `tb/scala_ref_pkg.sv` | behavioural reference models `ref1d`, `ref2d` used by the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module, `tb_scala_pheno` for the noisy-rounds workload, and `tb_scala_top_full` at full size |

## The repetition-code automaton (SCALA1D)

A distance-`d` periodic repetition code has `d` data qubits on a ring and `d`
Z.Z checks between them. Cell `i` sits on check `i`, between qubit `i` (its
*left* qubit) and qubit `i+1` (its *right* qubit):

    syndrome[i] = q[i] ^ q[(i+1) % d]
    cell i may flip q[i] (flip_left) or q[i+1] (flip_right)

A cell stores three bits: the defect it was last given, and two signal bits.
`l` is a signal travelling left and `r` one travelling right. One step applies
four sub-rules to every cell at once, from the state before the step:

1. **Acquire the defect.** The cell's defect is this step's syndrome bit.
2. **Broadcast.** A cell with a defect whose `l` and `r` are both clear
   emits a signal both ways. A cell that already holds a signal emits
   nothing new.
3. **Signalling.** Signals shift by one cell: a cell's new `l` is the right
   neighbour's outgoing `l`, and its new `r` is the left neighbour's outgoing
   `r`. Signals are never absorbed. They keep running until a reset clears
   them.
4. **Correction.**
   * *Nearest-Neighbour*: if this cell and its left neighbour both have a
     defect, flip the qubit between them (this cell's left qubit).
   * *Signal-Follow*: if this cell's defect is isolated (no defect on either
     side), and it holds exactly one signal, move the defect towards the
     signal's source. An `r` came from the left, so flip the left qubit. An
     `l` came from the right, so flip the right qubit. With two signals or
     none it does nothing.

A cell never flips more than one qubit per step. When two neighbouring cells
flip the same shared qubit in one step, the two flips cancel. The array
computes `flip[i] = flip_left(i) ^ flip_right(i-1)`.

### Which signals a correction reads

The sub-rules do not pin down whether Signal-Follow reads the signal bits a
cell held at the start of the step, or the ones that arrive during it. This
design reads the **stored** ones, so a signal acts one step after it lands.
Of the two readings, this is the one that reproduces two of the paper's statements:
defects "start moving" in the step after the signals reach them, and the
slowest error pattern takes **exactly `d-2` steps** to erode. The exhaustive
`d = 11` testbench confirms the second: the slowest of its 2048 patterns
clears in exactly 9 steps. Reading the just-arrived signals also gives a
majority vote, but one step sooner (`d-3`).

### Why it is a majority vote

With no resets, every defect emits once, and the `4·min(w0, d-w0)` signals of
a weight-`w0` pattern remain on the ring after `d-2` steps. The
testbenches check that number. Defects bounding a cluster of errors walk
inwards, one qubit per step, and the shorter of the two possible corrections
always finishes first. After `d-2` steps all errors are gone if
`w0 < (d+1)/2`, and all qubits are flipped otherwise. For the patterns
tried (all `2^11` at `d=11`, all `2^9` at `d=9`, random ones at `d=81`) the
result equals a global majority vote.

## The toric-code automaton (SCALA2D)

A distance-`d` toric code has `d x d` plaquettes on a torus. This design
labels the two edges owned by plaquette `(r,c)`: `h[r][c]` is its north edge
and `v[r][c]` its west edge. Hence

    syndrome[r][c] = h[r][c] ^ h[r+1][c] ^ v[r][c] ^ v[r][c+1]    (indices mod d)

A cell stores a defect and four signal bits `s_N, s_E, s_S, s_W`, each named
by the direction it *travels*. It may flip one of its four edges per step.

* **Broadcast** is done per axis. A defect cell with neither horizontal
  signal sets both of them. Independently, a defect cell with neither vertical
  signal sets both of those. Without the next rule, the lattice would simply be two
  SCALA1D automata, one along the rows and one along the columns.
* **Signalling** shifts every signal one plaquette in its direction.
* **Reflection.** A cell *without* a defect that receives two or more
  signals swaps them (N<->S, E<->W). When a vertical and a horizontal signal
  cross at an empty cell, each is sent back to its emitter. This is how two
  defects that are diagonal to each other, rather than in one row or column,
  find each other. The reflected signal tells each defect where to walk.
* **Nearest-Neighbour.** Defect here and west: flip the west edge. Otherwise,
  defect here and north: flip the north edge. Looking only west and north
  means each shared edge is flipped by exactly one of its two cells.
* **Signal-Follow** acts only for an isolated defect (no defect on the four
  neighbours), and on the stored signals, as in 1D. "From X" means "emitted
  on the X side", i.e. travelling away from X.

  | signals held | flip |
  |---|---|
  | one, from X | edge X |
  | three: one pair plus a lone one from X | edge X |
  | two: from W and N, or from W and S | W |
  | two: from N and E | N |
  | any other two, zero, four | nothing |

  The two-signal rows are the Nearest-Neighbour priorities (west first, then
  north) written for signals, as the text of the paper describes them. The
  paper's rule figure draws the third two-signal pattern with the *south*
  edge flipped. This design follows the text, which is also the choice that
  moves the defect towards an emitter. This is the one place where the RTL
  and the paper's figure disagree.

The toric code is CSS: bit flips and phase flips are decoded separately.
`scala_top` therefore holds two identical arrays. One takes the plaquette
(Z-type) syndrome and returns X corrections. The other takes the star
(X-type) syndrome and returns Z corrections. In the second array, star
`(r,c)` is treated as plaquette `(r,c)` of the dual lattice, so its
`flip_h`/`flip_v` name dual-lattice edges. Mapping them back to physical
edges is a labelling choice left to the host.

## Signal resets

Signals that are never cleared eventually fill the lattice and mislead
defects that appear later. A global reset clears every signal bit at once.
`reset_scheduler` generates it in one of three modes (`sched_mode_e`):

| mode | use | behaviour |
|---|---|---|
| `SCHED_NONE` | 1D, code capacity | never resets; run `d-2` steps |
| `SCHED_PERIODIC` | 1D and 2D under repeated noisy rounds | resets at the end of every `t_r`-th step (`t_r` = 0: never) |
| `SCHED_RAMP` | 2D, code capacity | intervals 1, 2, ..., d, d-1, ..., 1; resets at the end of steps 1, 3, 6, ..., and the last at step `d*d`, then `done` |

The ramp makes nearby defect pairs (short intervals) connect before distant
ones, while the long middle intervals still let signals cross the whole
torus. Its intervals add up to exactly `d*d` steps, which is where a
code-capacity run ends.

The reset is applied at the end of a step, after that step's corrections,
and only on a cycle with `step` high. `t_r` is a run-time input, because the
best interval depends on the noise rate and is found by search. `done`,
`tr_cur` (current interval) and `step_count` are for the host.

## Timing and interface

Everything runs on one clock with an active-low asynchronous reset `rst_n`.

* **One automaton step per `step` pulse.** On that clock edge each cell takes
  its new defect and signals. Its correction goes into a register.
* **Corrections are valid one cycle later**, with `flip_valid` high for that
  single cycle. They are zero otherwise. A closed measure-decode-correct loop
  therefore costs two cycles per step: present the syndrome with `step`, then
  apply the flips before computing the next syndrome. The host may insert
  any number of idle cycles. Nothing changes while `step` is low.
* **`start` / `clear`** empties all cells and restarts the schedule for a
  new run. It takes one cycle, during which `step` is ignored.

`scala_top` ports, with defaults `D1 = D2 = 81`:

| port | width | meaning |
|---|---|---|
| `rep_start`, `rep_step` | 1 | new run; take one step |
| `rep_mode`, `rep_t_r` | enum, 7 | reset schedule and periodic interval |
| `rep_syndrome` | D1 | `q[i]^q[i+1]` for this step |
| `rep_flip`, `rep_flip_valid` | D1, 1 | qubits to flip, valid the cycle after the step |
| `rep_done`, `rep_step_count` | 1, 13 | ramp finished; steps taken |
| `tor_start`, `tor_step`, `tor_mode`, `tor_t_r` | as above | toric-code run control (both arrays) |
| `tor_synd_plaq`, `tor_synd_star` | D2 x D2 each | plaquette and star syndromes, `[row][col]` |
| `tor_xflip_h/v`, `tor_zflip_h/v` | D2 x D2 each | north/west edge flips for X and Z corrections |
| `tor_flip_valid`, `tor_done`, `tor_step_count` | 1, 1, 13 | |

Data qubits and stabilizer measurement are not part of the design. They are
the quantum device, and the testbenches model them as bit arrays.

## Size

| unit | flip-flops | word-level cells after coarse synthesis | instances at default size |
|---|---|---|---|
| `scala1d_cell` | 5 (defect, l, r, two flip registers) | 35 | 81 |
| `scala1d_array`, D = 81 | 406 | 2757 | 1 |
| `scala2d_cell` | 9 (defect, 4 signals, 4 flip registers) | 78 | 2 x 6561 |
| `reset_scheduler`, D = 81 | 29 (interval, counters, flags) | 60 | 2 |

Coarse synthesis of a full 81 x 81 array flattens 6561 cells into one
netlist. In Yosys that takes longer than ten minutes: 2.6 s at D = 9 and
40 s at D = 27, growing faster than the cell count. The lint and
elaboration front ends accept the full-size design in about a minute and a half.

A cell's logic is a handful of gates: broadcast, a 4-input count,
a swap multiplexer and a small priority encoder. At `D2 = 81` a toric-code
array has 6561 cells and about 59,000 flip-flops. The top level has about
119,000 in total. `D` is fixed at elaboration and the lattice wraps around,
so an instance decodes exactly one distance. A smaller code needs its own
instance with `D = d`.

## What follows the paper and what is this design's own

Taken from the paper:
* the cell state;
* the four sub-rules in both dimensions;
* the broadcast condition (both signals clear);
* the reflection condition;
* the Nearest-Neighbour and Signal-Follow rules, except for the one
  two-signal pattern discussed above;
* two independent 2D instances for the CSS code;
* the three reset schedules, with the ramp's exact intervals.

This design's own choices:
* **Synchronous update from the state before the step.** The paper's text
  calls the update synchronous. Its pseudo-code loops over cells in place.
* **Signal-Follow reads the stored signals** (see above).
* **Broadcast when both signals are clear.** The paper's text and rule
  figure say this. Its pseudo-code writes a slightly different condition.
  Both give the same majority vote.
* **Reset at the end of the step.**
* **Edge and cell indexing; the registered, one-cycle-later corrections;
  `clear`/`start`; the port-level interface.**
* **Both decoders under one top.**

Not built:
* the injection of measurement and signal noise used in the paper's
  evaluation. Measurement noise is just a wrong syndrome bit at the input.
  Signal noise would need a way to flip the cell's signal registers, and
  exists only as a fault model.
* the matching-based check for logical errors that the paper runs after
  each step. It is an evaluation tool, not part of the decoder. The
  testbenches use a simple parity check on the torus cuts instead.

## Verification

Each testbench compares the design with values it works out independently
and ends with a `TB_RESULT checks=N failures=M` line. Each also has a
watchdog. The array and top-level tests drive the design as a host would: keep
the qubits, compute the syndrome, step, apply the flips. After every step
they compare the qubits (and, for the arrays, every signal bit) with the
loop-based reference models in `tb/scala_ref_pkg.sv`.

| testbench | size | what it checks |
|---|---|---|
| `tb_scala1d_cell` | 1 cell | 20,000 random cycles against an inline model; directed Signal-Follow, two-signal and Nearest-Neighbour cases; reset/clear |
| `tb_scala1d_array` | D = 11 | all 2048 error patterns: per-step match with the model, majority vote, `4·min(w0,d-w0)` signals, slowest erosion exactly `d-2` |
| `tb_scala2d_cell` | 1 cell | 40,000 random cycles; every one of the 16 stored-signal patterns against a written-out Signal-Follow table; reflection; no reflection at a defect |
| `tb_scala2d_array` | D = 7 | every single-qubit error and random weight-2 errors corrected by the ramp with no logical error; an L-shaped error removed via reflection; heavier errors match the model step by step |
| `tb_reset_scheduler` | D = 5 | ramp resets at 1, 3, 6, 10, 15, 19, 22, 24, 25, then `done`; periodic with `t_r` = 0..4; none |
| `tb_scala_top` | D1 = 9, D2 = 5 | all 512 repetition patterns; periodic reset with data errors between steps; X and Z arrays with ramp and periodic schedules; each mechanism counted and required |
| `tb_scala_pheno` | D1 = D2 = 15 | repeated noisy rounds: data errors and measurement errors every step, periodic reset; per-step match with the models fed the same faulty syndrome; 1D steps-to-failure at p = q = 1 % and 6 %; quiet tail clears the 1D syndrome |
| `tb_scala_top_full` | defaults (81, 81) | 1D majority vote at d = 81; full 6561-step ramp on both 81 x 81 arrays with strings, pairs and L-shapes; syndrome cleared, no logical error |

To run one with plain Verilator:

    verilator --binary --timing --assert --top-module tb_scala2d_array \
        -Irtl -Itb rtl/scala_pkg.sv tb/scala_ref_pkg.sv \
        rtl/scala2d_cell.sv rtl/scala2d_array.sv tb/tb_scala2d_array.sv
    ./obj_dir/Vtb_scala2d_array

The small tests finish in a few seconds. `tb_scala_top_full` takes
about 5 minutes to compile and under a minute to run.

`tb_scala_pheno` prints the mean number of steps to the first logical
failure of the repetition code (at least `(d+1)/2` qubits flipped). At
`d = 15` with `t_R = 7` no failure occurs within its 4000-step cap at
p = q = 1 %, and failure comes after about 80 steps at 6 %. The 20-run
averages are a smoke test, not a reproduction of the paper's lifetime
curves.

How far to trust it: the cycle-level behaviour is checked bit for bit
against an independent loop-based model. The decoding properties (majority
vote, the `d-2` bound, single and double errors on the torus) are checked
directly. The logical error *rates* of the paper's plots were not
reproduced in SystemVerilog. They were only compared, outside this code, with
a software model of the same rules, which gave rates close to the paper's
at `d = 3` and `d = 9`.
