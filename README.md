# ERASER: adaptive leakage suppression for a surface-code controller

Superconducting qubits can *leak*: a qubit that should hold |0> or |1>
ends up in a higher energy level such as |2> (written |L>). A leaked
qubit is not fixed by ordinary error correction. It stays leaked for many
rounds and it corrupts the parity checks around it. The usual fix is a
*leakage reduction circuit* (LRC). In each round the data qubit is swapped
with a neighbouring parity qubit. The swapped-out state is measured and
reset, which removes any leakage, and then it is swapped back. Running LRCs
on every data qubit in every round costs a lot: each LRC adds five CNOTs
to the four a round already has. That adds gate errors, and the extra CNOTs
can carry leakage to new qubits.

ERASER runs LRCs only where they are likely needed. A leaked data qubit
leaves a clear mark in the syndrome: it makes its neighbouring parity checks
flip at random. The controller watches for that pattern after each round.
In the next round it places LRCs on just the data qubits that look leaked,
each paired with a free neighbouring parity qubit. This is a small block of
digital logic. It sits between the readout electronics and the qubit
control and runs once per error-correction round. This repository gives
its RTL: about 550 lines of SystemVerilog, with a testbench for every block.

## The loop in one round

```
 readout ──syndrome──► LSB ──LTT──► DLI ──plan──► QSG ──layers──► qubits
 (|L> flags)          ▲  (speculate)  ▲ (pair)       │ (schedule)
                      │               │              │
                      │        SWAP lookup table     │
                      └──── PUTT / Previous LTT ◄────┘ commit (pairs used)
```

* **LSB, Leakage Speculation Block** (`eraser_lsb`). It turns a syndrome
  into the **LTT**, the Leakage Tracking Table. The LTT has one bit per data
  qubit, meaning "give this qubit an LRC next round".
* **SWAP lookup table** (`eraser_swap_lut`). For each data qubit it holds a
  *primary* and a *backup* neighbouring parity qubit to swap with.
* **DLI, Dynamic LRC Insertion** (`eraser_dli`). It gives each marked data
  qubit its primary partner. If the primary is taken it uses the backup.
  No parity qubit is used twice in a round, and none is used that cannot
  take part this round.
* **QSG, QEC Schedule Generator** (`eraser_qsg`). It emits the gate layers
  of each round and inserts the LRC gates for the pairs in the plan.
* `eraser_top` wires these four together.

## Lattice and numbering (`eraser_pkg`)

The code is a rotated surface code of distance `D`. It has `D*D` data
qubits and `D*D-1` parity qubits. Data qubit (r,c) has index `r*D+c`.

Parity qubits sit on a `(D+1)x(D+1)` grid of plaquette corners (i,j).
Plaquette (i,j) touches data qubits (i-1,j-1) top-left, (i-1,j) top-right,
(i,j-1) bottom-left and (i,j) bottom-right, where those exist. Three rules
decide which plaquettes are used:

* every interior plaquette is used;
* on the top and bottom edges, only those with `i+j` even;
* on the left and right edges, only those with `i+j` odd.

This gives the standard layout: weight-4 checks inside and weight-2 checks
around the edge. Plaquettes with `i+j` even measure X stabilizers. Parity
qubits are numbered in row-major order over the used plaquettes. Every
table in the design, such as neighbour lists and default partners, is
computed from these rules by constant functions when the design is
elaborated. The RTL holds no stored tables and no generated files.

A data qubit has two, three or four parity neighbours. Corner qubits have
two and edge qubits have three.

## Speculation: when does a qubit look leaked?

A *flip* is a parity check whose value differs from the same check in the
previous round (a detection event). For data qubit `q` with `n` neighbours,
`cnt` of which flipped, the LSB sets `LTT[q]` when all of these hold:

1. `q` had **no LRC in the round that produced this syndrome**. An LRC
   swaps `q` out in the middle of the round, so its checks are expected to
   be noisy. Also, the LRC has just removed any leakage `q` had.
2. `2*cnt >= n`, so at least half of its checks flipped.
3. `cnt >= MIN_FLIPS` (default 2).

Rules 2 and 3 together mean: two of two for a corner qubit, two of three on
an edge, and two of four inside. With `MIN_FLIPS = 1` a corner qubit needs
only one flip. See the departures section for why both bounds exist.

The first syndrome after reset or `clear` only primes the "previous
syndrome" register and marks nothing.

In **ERASER+M** mode (`mlr_en = 1`) the readout can tell |L> apart from
|0> and |1>. A parity qubit read as |L> marks *every* neighbouring data
qubit in the LTT, whatever rules 1 to 3 say. The reasoning is that leakage
on a parity qubit most likely came from a data qubit it touched.

### Previous LTT and PUTT: the two pieces of memory

The LSB keeps two more tables. Both are loaded when the QSG *commits* a
plan, which means it starts issuing the LRCs:

* **Previous LTT**: the data qubits that really got an LRC. This feeds rule 1
  for the syndrome that round will produce. The table holds what was
  *scheduled*, not what was *wanted*. A marked qubit that the DLI could not
  pair got no LRC, so it stays eligible for speculation.
* **PUTT**, the Parity-qubit Usage Tracking Table: the parity qubits that
  took part in those LRCs. In an LRC round such a parity qubit is parked on
  the data site and measured there. Its own check gives no useful value
  for that round, so the DLI does not pick it again in the next round.

## Pairing (`eraser_swap_lut`, `eraser_dli`)

The default table gives `D*D-1` data qubits distinct primary partners, so an
"LRC on everything" plan would almost fit. One data qubit, the bottom-right
(D-1,D-1), has to share: there is one parity qubit fewer than data qubits.
The construction, in `eraser_pkg::default_primary`, works column by column:

* data qubit (r,c) with `c` odd takes plaquette (r, c+1) when `r` is even
  and (r, c) when `r` is odd;
* data qubit (r,c) with `c` even takes plaquette (r+1, c+1) when `r+1` is
  even or equal to `D`, and (r+1, c) otherwise;
* the left-over qubit (D-1,D-1), whose candidate does not exist, takes
  plaquette (D-1,D-1), which it shares.

The backup is the first other neighbour. The control processor can replace
any entry through the table's write port (`lut_we`, `lut_addr`,
`lut_primary`, `lut_backup`).

The DLI is one combinational priority chain in data-qubit index order. A
running "used" mask starts as the PUTT. Each marked data qubit then takes
its primary if that parity qubit is free, otherwise its backup if that one
is free, and otherwise gets nothing this round. Whatever it takes is added
to the mask. The chain is `D*D` stages long. At D=11 that is 121 small
stages, which is the longest combinational path in the design.

## The schedule (`eraser_qsg`)

The QSG streams layers with a valid/ready handshake. A layer gives an
operation for every parity qubit (`par_op`) plus the data qubit it works
with (`par_partner`), and a measure flag for every data qubit (`data_op`).

| layer | name      | parity qubit of an LRC pair | other parity qubits   |
|-------|-----------|-----------------------------|-----------------------|
| 0     | H         | H if X check                | H if X check          |
| 1-4   | CX        | stabilizer CNOT             | stabilizer CNOT       |
| 5     | H         | H if X check                | H if X check          |
| 6     | SWAP1 a   | CX P->D                     | idle                  |
| 7     | SWAP1 b   | CX D->P                     | idle                  |
| 8     | SWAP1 c   | CX P->D                     | idle                  |
| 9     | MR        | idle (its data qubit is MR) | measure + reset       |
| 10    | SWAP2 a   | CX P->D (or R, ERASER+M)    | idle                  |
| 11    | SWAP2 b   | CX D->P (or idle)           | idle                  |

The stabilizer CNOTs visit corners in the order TL,TR,BL,BR for X checks
and TL,BL,TR,BR for Z checks. With these orders no data qubit takes part in
two CNOTs of the same layer.

After the first SWAP the parity qubit holds the data state and the data site
holds the syndrome. So in layer 9 it is the **data** qubit that is measured
and reset, in place of its parity qubit. Layer 9 holds the syndrome bit for
that check. The second SWAP only needs two CNOTs because the data site is
then in |0>.

Rounds whose plan is empty skip layers 6-8 and 10-11 entirely.

**When the plan is needed.** A plan depends on the syndrome of the
previous round, which has to travel through readout and the LSB. The QSG
does not need the plan at the start of a round, only at layer 6, after the
fourth stabilizer CNOT. That is where it commits. If `plan_valid` is still
low there, the QSG raises `stall` and holds the round until the plan
arrives. With no stall and no back-pressure, a round takes 8 cycles without
LRCs (7 layers plus the commit cycle) and 13 with LRCs. The plan
itself is ready one cycle after `meas_valid`.

**ERASER+M squash.** In ERASER+M mode, an LRC round stops after layer 9
until `meas_valid` brings the multi-level readout of the measured data
qubits (`data_leak`). Each pair whose data qubit read |L> loses its second
SWAP: layer 10 resets the parity qubit instead (`OP_R`) and layer 11 idles.
The leaked state was removed by the reset, and the swapped data state now
lives on the parity qubit. This design keeps that as stated and does not
model further bookkeeping of where the data state lives.

## Departures and own choices

Where the description this design follows was silent or ambiguous, these
choices were made:

* **Threshold.** The rule is stated both as "at least half of the neighbours
  flipped" and as "at least two flips". The two differ only for corner
  qubits. Both are applied; `MIN_FLIPS = 1` removes the second.
* **Flip** means a change from the previous round. The alternative reading,
  a raw syndrome bit of 1, would keep marking the neighbours of any
  ordinary data error in every later round.
* **Previous LTT** records the LRCs actually scheduled, not the LTT.
* **Conflict order.** The DLI resolves conflicts in fixed data-qubit
  order. A qubit whose primary and backup are both taken gets no LRC and is
  not carried over. It will be marked again if its checks keep flipping.
* **Layer structure.** The H layers, the CNOT corner orders, the control
  and target order inside the SWAPs, and one layer per handshake are all
  this design's choices. Every LRC in a round shares the same layers.
* **Table contents.** The default SWAP table is this design's own
  construction. The table is writable.
* **Interfaces.** The handshakes (`meas_valid`, `plan_valid`/`commit`,
  `layer_valid`/`layer_ready`), the asynchronous active-low reset and
  `clear` are not specified by the source.
* **Not built.** The decoder, the readout discriminators and the qubits
  are outside the controller. Their signals are ports of `eraser_top`.
* **Timing.** No timing target is claimed. The combinational DLI chain
  at D=11 will not meet a few-nanosecond budget as written. Pipelining it
  across the roughly four-CNOT window before layer 6 is the obvious change,
  because the QSG already tolerates a late plan by stalling.

## Parameters

| parameter   | default | meaning                                              |
|-------------|---------|------------------------------------------------------|
| `D`         | 11      | code distance (121 data, 120 parity qubits)          |
| `MIN_FLIPS` | 2       | minimum flipped neighbours to mark a data qubit      |

`D` must be odd and at least 3. Everything else, including widths, tables
and neighbour lists, follows from `D`. At D=11, yosys maps the top level to
about 10,500 generic cells and 3,400 flip-flop bits.

## Files

| file                        | contents                                        |
|-----------------------------|-------------------------------------------------|
| `rtl/eraser_pkg.sv`         | operation enum, layer numbers, lattice functions |
| `rtl/eraser_lsb.sv`         | speculation, LTT, Previous LTT, PUTT            |
| `rtl/eraser_swap_lut.sv`    | primary/backup partner table                    |
| `rtl/eraser_dli.sv`         | greedy pairing                                  |
| `rtl/eraser_qsg.sv`         | layer sequencer with stall and squash           |
| `rtl/eraser_top.sv`         | the controller                                  |
| `tb/tb_lattice_pkg.sv`      | independent lattice model and reference rule    |
| `tb/tb_eraser_*.sv`         | one self-checking testbench per module          |
| `tb/tb_eraser_memory.sv`    | memory experiments at d = 3 to 11               |
| `tb/tb_memory_lane.sv`      | one distance of that experiment                 |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops. For
example, the end-to-end test:

```
verilator --binary --timing -Wno-fatal --top-module tb_eraser_top \
  rtl/eraser_pkg.sv rtl/eraser_lsb.sv rtl/eraser_swap_lut.sv \
  rtl/eraser_dli.sv rtl/eraser_qsg.sv rtl/eraser_top.sv \
  tb/tb_lattice_pkg.sv tb/tb_eraser_top.sv
./obj_dir/Vtb_eraser_top
```

The block testbenches build the same way with their own top module. They
need only the RTL files that block uses: `eraser_pkg.sv` plus the module.

What the testbenches check:

* `tb_eraser_lsb` (D=5): LTT against a reference speculation rule over 600
  random rounds, with and without ERASER+M, including a `clear` and directed
  one-of-four and two-of-four cases.
* `tb_eraser_swap_lut` (D=11): default entries are distinct, adjacent and
  valid; writes and reset.
* `tb_eraser_dli` (D=5): exact agreement with a reference greedy pairing
  under random tables, LTTs and PUTTs.
* `tb_eraser_qsg` (D=3): every layer against a reference schedule, round
  lengths of 8 and 13 cycles, stalls, random back-pressure, and the ERASER+M
  wait and squash.
* `tb_eraser_top` (D=11, defaults): a closed loop with a simple leakage
  environment. Random data qubits leak. A leaked qubit flips each of its
  checks with probability 1/2, other checks rarely flip, and an LRC on a
  leaked qubit cleans it. The readout delay is random and sometimes long
  enough to cause stalls. Over 400 rounds it checks the LTT every round,
  every LRC pair (adjacent, distinct, not in the PUTT, marked in the LTT),
  the data measurements and the ERASER+M squashes. It also counts each
  mechanism and fails if any never occurs. In a typical run about 2.9 LRCs
  are issued per round, every injected leak is cleaned, and stalls, backup
  partners, ERASER+M marks and squashes each occur dozens to hundreds of
  times.

* `tb_eraser_memory` (D=3, 5, 7, 9 and 11 side by side, through the
  helper `tb_memory_lane`): the memory-experiment length used to evaluate
  the scheme, 10 QEC cycles (10*d rounds), at each distance, first with
  ERASER and then, after a `clear`, with ERASER+M. The same per-round
  checks as above are applied, and each distance must issue LRCs and clean
  leaks (and, for d >= 5, squash second SWAPs).

The leakage environment in `tb_eraser_top` and `tb_eraser_memory` is a test stimulus, not a
physical noise model. Logical error rates cannot be obtained from this RTL.
