# Leakage speculation engine for surface-code error correction

Superconducting qubits occasionally leave the computational {|0>, |1>}
subspace and "leak" into |2> or higher. A leaked data qubit is never measured
directly during error correction, but it breaks every CNOT it takes part in:
its parity (ancilla) partners flip at random, round after round, and the
leakage can spread. A leakage reduction circuit (LRC) returns the qubit to
the computational subspace, but LRCs are slow and noisy themselves, so they
should be applied only where leakage is likely.

This RTL decides, every error-correction round, **which data qubits get an
LRC in the next round**. It follows the GLADIATOR scheme ("Accurate Leakage
Speculation for Quantum Error Correction", Mude and Tannu). For each data
qubit, the flips of the 2 to 4 parity qubits it touches form a short bit
pattern. An offline analysis compares how likely each pattern is under
leakage and under ordinary Pauli errors. The patterns that leakage explains
better are reduced to a small Boolean function. In hardware, each data
qubit's pattern is pushed through that function. A data qubit also gets an
LRC when multi-level readout (MLR) finds one of its parity qubits leaked.

The fixed single-round function flags far fewer patterns than a "half or
more of the parity bits flipped" rule. That is where the saving in
unnecessary LRCs comes from.

## One round, end to end

```
 syndrome[NA] ──┐            ┌──────────── dpag (this round) ──┐ 5-bit tagged
 mlr_leaked[NA]─┤ capture    │                                 ├─► seq_checker ×NCHK ─┐
 round_valid ───┤ registers ─┤──── dpag (previous round) ──────┘ 10-bit window         │ d_mode
                │            │                      └─► pattern_table (NCHK ports) ──┤ mux
                │            └──► pq_leak_checker ──► pq_leak[ND] ──┐                 │
                │                                                   ▼                 ▼
                └───────────────────────────── lrc_scheduler:  mask[q] = hit | (mlr_en & pq_leak[q])
                                                                   │
                              lrc_valid, lrc_mask[ND] ◄────────────┘──► mobility_estimator
```

1. **Capture.** The controller presents one round's parity flips
   (`syndrome`, one bit per parity qubit) and MLR leakage flags
   (`mlr_leaked`) with a one-cycle `round_valid`. The engine latches them.
   The round before is kept as history.
2. **Pattern generation** (`dpag`). This is fixed wiring. It gathers, for
   every data qubit, the flips of its neighbouring parity qubits and tags
   them to a uniform 5-bit word (next section). A multiplexer network then
   deals the data qubits out to a few shared checkers, one qubit per checker
   per clock.
3. **Classification.** In single-round mode, `seq_checker` evaluates the
   fixed template. In two-round mode (`d_mode = 1`), the 10-bit word
   {previous round, this round} is looked up in `pattern_table`.
4. **Parity-qubit leakage** (`pq_leak_checker`). For every data qubit, this
   ORs the MLR flags of its neighbours.
5. **Scheduling** (`lrc_scheduler`). This ORs the two verdicts per data qubit
   (the MLR part only when `mlr_en = 1`) and collects them into the round's
   mask. It publishes the mask with `lrc_valid`. An LRC is due on every data
   qubit whose bit is set, in the next round.
6. **Mobility estimate** (`mobility_estimator`). This watches the published
   rounds and classifies leakage mobility as low or high.

## Layout, numbering and the tagged pattern

This is the part a user has to get right, because the engine only sees bit
positions.

The code is a rotated surface code of odd distance `D`, with `D*D` data
qubits and `D*D-1` parity qubits.

- **Data qubit numbering.** The data qubits form a D×D grid, numbered
  row-major from the top-left. `q = row*D + col`. Data qubit D1 is index 0.
- **Where the parity qubits are.** They sit on the corners of the grid
  cells, at corner coordinates `(i, j)` with `0 <= i, j <= D`:
  - Every interior corner has one.
  - On the top edge (`i = 0`), only corners with even `j` have one.
  - On the bottom edge (`i = D`), only odd `j`.
  - On the left edge (`j = 0`), only odd `i`.
  - On the right edge (`j = D`), only even `i`.
  - The four outer corners are empty.
- **Parity qubit numbering.** Parity qubits are numbered row-major over
  `(i, j)`. Parity qubit A1 is `syndrome[0]`.
- **Read order.** A data qubit's neighbours are read clockwise: north-west,
  north-east, south-east, south-west. Missing ones are skipped.
- **Tagging.** The bits are packed, first-read bit highest, under a length
  tag. This gives a 5-bit word `x4..x0`:

  | neighbours | word                  |
  |------------|-----------------------|
  | 4          | `0 a b c d`           |
  | 3          | `1 0 a b c`           |
  | 2          | `1 1 0 a b`           |

For D = 3 this gives the following (parity qubits 1-based):

| data | neighbours (read order) | word |
|------|-------------------------|------|
| D1 | A3 A2 | `110 A3 A2` |
| D2 | A1 A4 A3 | `10 A1 A4 A3` |
| D3 | A1 A4 | `110 A1 A4` |
| D4 | A2 A3 A5 | `10 A2 A3 A5` |
| D5 | A3 A4 A6 A5 | `0 A3 A4 A6 A5` |
| D6 | A4 A7 A6 | `10 A4 A7 A6` |
| D7 | A5 A8 | `110 A5 A8` |
| D8 | A5 A6 A8 | `10 A5 A6 A8` |
| D9 | A6 A7 | `110 A6 A7` |

The D2, D3 and D5 rows are the published examples. The layout rule and the
clockwise read order are the simplest rule that reproduces all three, and
they are carried over to larger D. If your controller numbers qubits
differently, either permute `syndrome`/`mlr_leaked`/`lrc_mask` outside the
engine or change `anc_present`/`corner_anc` in `gladiator_pkg`.

`syndrome` must already be a *flip* (detection event): this round's parity
measurement XOR the previous one's. The engine does not form it.

## The single-round template

The surface-code template, in terms of the tagged word, is:

```
leak = x0·x1·x4 + x0·x2·x3 + x2·x3·x4 + x2·x3·x̄1 + x2·x4·x̄0·x̄1
```

Spelled out over the three pattern lengths:

- **4-bit patterns** (`x4 = 0`). The flagged `abcd` are `1100`, `1101` and
  `1111`.
- **3-bit patterns.** The flagged `abc` are `011`, `111` and `100`.
- **2-bit patterns.** Only `11` is flagged.

Be aware of one inconsistency in the source. The text says the method flags
7 (or 8) of the 16 four-bit patterns, but this printed expression flags 3.
The RTL implements the expression as printed, because it is the only complete
definition available. If you have the intended label set, change
`match_surface` in `gladiator_pkg`, or use the two-round table path with a
table that ignores the older round.

`seq_checker` can also be built with the published colour-code (single and
two-round) and balanced-product-cyclic templates (`PSET`). These are there
for reuse only. The engine has no pattern generator for those codes (see
"What is not here").

## Shared checkers and timing

One evaluation of the template is a couple of logic levels. The design
assumes one evaluation per 1 ns clock. Leakage decisions are due within about
100 ns of the syndrome (roughly four CNOT durations), so one checker can
serve `SLOTS = 100` data qubits per round. The engine therefore instantiates

    NCHK = ceil(D*D / SLOTS)

checkers: 2 at D = 11, 7 at D = 25. Checker `c` serves data qubits
`c*SLOTS .. c*SLOTS+SLOTS-1`, one per slot. The last checker may have idle
slots (`qvalid = 0`).

Cycle by cycle, taking the edge that accepts `round_valid` as edge 0:

- Slots `0..NSLOT-1` (`NSLOT = min(SLOTS, D*D)`) are committed on edges
  `1..NSLOT`.
- `lrc_valid` is high for the one cycle after edge `NSLOT`.
- The controller therefore samples it on edge `NSLOT+1`: edge 101 for
  D = 11, which is 100 ns of classification plus the capture cycle at 1 GHz.
- `busy` is high from edge 0 until the mask is published.
- A new round may be presented in the same cycle as `lrc_valid`, giving a
  round period of `NSLOT+1` cycles.
- A `round_valid` that arrives while `busy` is high is **dropped** and
  reported by a one-cycle `overrun` pulse. The engine never holds two rounds.

`lrc_mask`, `spec_mask` (template/table verdicts only) and `lrc_count` hold
their values until the next publication. Reset is synchronous and
active-low. It clears the masks, the history, the pattern table and the
mobility counters.

## Modes

| `mlr_en` | `d_mode` | behaviour |
|---|---|---|
| 1 | 0 | single-round template + MLR (the main configuration) |
| 0 | 0 | single-round template only |
| 1 | 1 | two-round window + MLR |
| 0 | 1 | two-round window only |

Both mode bits are sampled with each accepted round, so modes can change from
one round to the next.

**Two-round (windowed) speculation.** A pattern seen once may come from
either an ordinary error or leakage. How it evolves in the next round
separates the two: a data X error gives a consistent follow-up, while leakage
keeps producing random flips. In this mode each data qubit's 10-bit word is
`{tagged pattern of the previous round, tagged pattern of this round}`, and
the verdict is read from `pattern_table`, a 1024-bit table with one read
port per checker.

The table is loaded after calibration, one bit per cycle:

- `cfg_we`: write enable.
- `cfg_addr`: the 10-bit word to label.
- `cfg_data`: 1 = leakage.

The table is cleared by reset, so nothing is flagged until it is loaded. The
round right after reset has no history, so it gets no speculative LRC in this
mode. Its MLR-driven LRCs still apply.

The source gives no two-round surface-code label set. It only reports that
its two-round variant flags 70 of 256 eight-bit patterns, and it does not
list them. That is why this path
is a writable table and not fixed logic. In an FPGA the table costs far more
than the single-round logic.

## Leakage mobility estimate

Leakage mobility is how readily leakage hops between neighbouring qubits. It
decides whether a cheap open-loop LRC schedule is enough or whether
syndrome-driven speculation is worth it.

The estimator works from each published round:

- For every data qubit in `spec_mask`, it counts the qubit's neighbouring
  parity qubits (`mob_pairs`).
- It also counts how many of those neighbours MLR found leaked in the same
  round (`mob_leaked_pairs`).

Mobility is reported high (`mob_high`) when `leaked/pairs >= 5 %`, and low
below that. A ratio of exactly 5 % counts as high.

`mob_valid` stays low until the first pair is counted. `mob_clear` restarts
the estimate. The counters are 32 bits wide and saturate.

## Top-level ports (`gladiator_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, synchronous active-low reset |
| `round_valid` | in | 1 | a round's `syndrome`/`mlr_leaked` are valid |
| `syndrome` | in | D*D-1 | parity flips, A1 in bit 0 |
| `mlr_leaked` | in | D*D-1 | MLR: parity qubit found leaked |
| `mlr_en`, `d_mode` | in | 1 | mode bits (see table above) |
| `mob_clear` | in | 1 | restart the mobility estimate |
| `cfg_we`, `cfg_addr[9:0]`, `cfg_data` | in | | pattern table write |
| `busy` | out | 1 | a round is being classified |
| `overrun` | out | 1 | a round arrived while busy and was dropped |
| `lrc_valid` | out | 1 | one-cycle strobe: masks below are new |
| `lrc_mask` | out | D*D | apply an LRC to these data qubits next round (D1 in bit 0) |
| `spec_mask` | out | D*D | the subset flagged by the template/table alone |
| `lrc_count` | out | clog2(D*D+1) | number of bits set in `lrc_mask` |
| `mob_pairs`, `mob_leaked_pairs` | out | 32 | mobility counters |
| `mob_valid`, `mob_high` | out | 1 | mobility estimate present / high |

Parameters:

- `D` is the code distance, odd, default 11. Distance 11 is the running
  example of the source.
- `SLOTS` is the number of data qubits per shared checker per round,
  default 100.

Changing `D` re-elaborates the whole layout. One build serves exactly one
distance. Distances 5, 7, 11, 13 and 17 are simulated end to end. Distance 25
elaborates but is not simulated.

## Files

- `rtl/gladiator_pkg.sv`: layout functions, tagging, all templates, the
  pattern-set enum.
- `rtl/dpag.sv`: adjacency gather and checker multiplexer.
- `rtl/seq_checker.sv`, `rtl/pattern_table.sv`: the two classifiers.
- `rtl/pq_leak_checker.sv`, `rtl/lrc_scheduler.sv`,
  `rtl/mobility_estimator.sv`.
- `rtl/gladiator_top.sv`: the engine.
- `tb/`: one self-checking testbench per module (`tb_<module>.sv`), plus:
  - `tb/tb_gladiator_top.sv`: end to end at D = 5, SLOTS = 10 (three
    checkers, the last one partly idle).
  - `tb/tb_gladiator_full.sv`: end to end at the default size.
  - `tb/tb_gladiator_sizes.sv`: end to end at D = 7, 13 and 17 (one, two
    and three checkers), three engines side by side.
  - `tb/tb_top_driver.sv`: the stimulus and scoreboard both of them use.
  - `tb/tb_ref_pkg.sv`: an independent reference. It holds the D = 3 table
    above typed in by hand, the layout recomputed on a doubled coordinate
    grid, and the templates written as cube strings.

The end-to-end scoreboard predicts every mask bit, the count, the latency,
the mobility counters and the classification. It also counts how often each
mechanism occurred, and fails the run if one never did:

- a match on a 4-, 3- and 2-bit pattern;
- a match served by a checker other than the first;
- an MLR-only LRC, and an MLR flag masked by `mlr_en = 0`;
- an overrun, and a back-to-back round;
- both mobility regimes;
- a two-round hit, a single-round match rejected by the table, the
  no-history first round, and mode switches.

Running a testbench with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps \
  rtl/gladiator_pkg.sv tb/tb_ref_pkg.sv \
  rtl/seq_checker.sv rtl/dpag.sv rtl/pq_leak_checker.sv rtl/pattern_table.sv \
  rtl/lrc_scheduler.sv rtl/mobility_estimator.sv rtl/gladiator_top.sv \
  tb/tb_top_driver.sv tb/tb_gladiator_full.sv --top-module tb_gladiator_full
./obj_dir/Vtb_gladiator_full
```

Packages go first. Each testbench ends with
`TB_RESULT checks=N failures=M` and has a watchdog. The full-size run
takes a few seconds after a build of under a minute.

## How far to trust it, and where it departs from the source

**Taken from the source:**

- the block structure: adjacency generator, sequence checker, parity qubit
  leakage checker, OR, LRC scheduler;
- the tag scheme and the three published adjacency examples;
- the minimised templates;
- the sharing of one checker by 100 data qubits inside a 100 ns budget;
- the two-round window of 10-bit patterns;
- "no speculation in the first round" for the windowed mode;
- the 5 % mobility threshold.

**This design's own choices:**

- the layout rule for D > 3 and the read order (both inferred from the D = 3
  example);
- the block-wise qubit-to-checker assignment;
- the round handshake, the dropping of overrunning rounds, and reset
  behaviour;
- run-time mode bits;
- a writable table for the two-round mode, with the older round in the high
  address bits;
- the mobility estimate counted per (flagged data qubit, neighbour) pair,
  using MLR of the same round;
- the counter widths.

**Known discrepancy:** the printed single-round template flags 3 of 16
four-bit patterns, while the text claims 7 or 8 (see above).

**What is not here:**

- the offline graph construction and node labelling, which is host software
  run at calibration time;
- the QEC controller that issues rounds and executes LRCs;
- the readout chain;
- pattern generators for colour, hypergraph-product and BPC codes, whose
  layouts are not specified.

Two things were not checked:

- Resource figures: the design replicates checkers exactly as the source's
  LUT formula assumes, but no FPGA mapping was run.
- Timing closure at 1 GHz.

The templates are cheap, but the `D = 25` build elaborates slowly, because
the layout functions are evaluated per qubit at elaboration.
