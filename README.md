# Error-corrected NOR logic inside a resistive memory array

Resistive nonvolatile memories (MRAM, ReRAM) can compute in place: biasing
several cells of a row at once makes one output cell switch only when its input
cells are all in the high-resistance state, which is a NOR gate. Every row of
the array runs the same gate at the same time, so a 256-row array evaluates 256
independent instances of a circuit in parallel. These gates fail far more often
than CMOS logic, and an error in one gate spreads through everything that
depends on it. This design keeps a row's intermediate results correctable
while they are still inside the array, with two interchangeable schemes:

* **ECiM (error correction in memory).** Every logic level's outputs form the
  data bits of a Hamming(255,247) codeword whose 8 parity bits live in the same
  row. The parity is not computed at the end: each NOR also writes its result
  into spare cells, and two further in-memory gates fold that result into every
  parity bit it belongs to. After each logic level a digital Checker outside
  the array reads the row, computes the syndrome and writes back a corrected
  bit.
* **TRiM (triple redundancy in memory).** Every NOR is a 3-output NOR that
  writes the result and two copies. After each level the Checker reads the
  three copies and writes back the bitwise majority.

The RTL contains the array (as a behavioural model), the controller that
schedules gates and checks, both Checkers, a tile that ties them together and
a 16-tile system top.

## Blocks

| Module | Role |
|---|---|
| `pim_pkg` | Constants, types (`instr_t`, `uop_t`, `stats_t`), `ham_col` (columns of A), `par_cell` (row layout) |
| `pim_array` | Behavioural model of a 256x256 array that computes. Each row executes its own micro-operation per cycle |
| `pim_controller` | Program memory, gate expander, parity side engines, level checks, delayed row start, event counters |
| `ecim_checker` | Hamming(255,247) syndrome decoder and single-error corrector |
| `trim_checker` | Collects three copies over three cycles and votes bitwise |
| `pim_tile` | Controller, array and both Checkers. Host port muxed onto the array while idle |
| `pim_system` | Top: 16 tiles, one host port, broadcast start, combined counters |

## Gate program

The host loads a list of `instr_t {op, a, b, o}` into a tile:

* `OP_NOR`: cell `o` = NOR(cell `a`, cell `b`) in every row.
* `OP_LEVEL`: ends a logic level, so the level's outputs are checked.
* `OP_HALT`: ends the program.
* `OP_NOP`: skipped.

The outputs written within one level are that level's codeword. Each
column may be written only once per level. The host writes input values into
the rows beforehand, reads results afterwards (`wr_*`, `rd_*`), and pulses
`start` with `scheme` set to ECiM or TRiM. Inputs that should stay constant
zero (for example NOR(x, 0) = NOT x) must be written into a spare column.

## Row layout

With 256 columns:

* **ECiM.**
  * Columns 0..175 are compute columns. A gate output in column `d` is Hamming
    data bit `d`.
  * Columns 176..255 are the parity region: two sides (left, right) × 8 parity
    bits × 5 cells. Cell `kind` of bit `p` on side `s` sits at column
    `176 + 40*s + 5*p + kind`.
  * The five cells are PA and PB (ping-pong copies of the running parity), R
    (the redundant output of the last NOR), and S1 and S2 (the NOR22 outputs).
* **TRiM.** Gate outputs go in columns 0..84. Their copies sit at `o+85` and
  `o+170`.

Column `d` of the Hamming matrix A is the d-th integer from 1 to 255 that is
not a power of two. Bit `i` of that integer means parity bit `i`. With 3
parity bits this ordering gives A = [1101; 1011; 0111], the usual Hamming(7,4)
form. With H = [A | I], a nonzero syndrome `s` that is not a power of two
points at data bit `s - 2 - floor(log2 s)`. A power of two points at a parity
bit.

## Keeping the parity current (ECiM)

This is the part that differs most from a plain ECC memory. The code must
track the level's data as each gate runs, using only in-array gates:

1. **Redundant outputs.** The NOR that writes column `d` is widened into a
   (1+w)-output NOR, where `w` is the number of ones in A's column `d`. The
   extra outputs go to cell R of each parity bit that A's column `d` names.
2. **XOR1.** NOR22(P, R) writes S1 and S2.
3. **XOR2.** THR(P, R, S1, S2) writes P'. THR switches when at least three
   of its four inputs are 0. Together, XOR1 and XOR2 give P' = P xor R.
   P' is written into the other cell of the ping-pong pair, so the old value
   is never overwritten in place. The controller records per bit which copy
   is current (`pp`).
4. Each parity bit named by the gate takes two cycles. A side is therefore
   busy for 2w cycles after a gate.
5. **Two sides.** Gates alternate between the left and right parity sides,
   which lets one side update while the next gate runs on the other.
   Including the NOR itself, at most three gates are active in a row.
   A NOR whose side is still busy waits, which counts as a `side_stall`.
   Each side holds a partial parity. At check time the controller XORs the
   left and right parity into the code's parity bits.

In one cycle the array model runs one compute gate and one gate on each side.
All three read the row state from before the clock edge.

## Checking a level

When the program reaches `OP_LEVEL` and both sides are idle, the controller
issues the level's check steps:

* **ECiM: R, W.**
  * **R** reads the row. The data is the compute columns masked to the level's
    outputs. The parity is left XOR right, taking the current ping-pong copy
    of each bit. Both go to `ecim_checker`, which answers one cycle later.
  * **W** writes the corrected bit back, but only when the error is in a data
    bit. A parity error is only counted, because the parity is discarded
    anyway. W also clears the parity region for the next level.
* **TRiM: R R R W.** The three copies go to `trim_checker` on consecutive
  cycles. If any copy disagrees, W writes the majority over the level's
  output columns.

`stats` counts `fix_data`, `fix_par` and `fix_tmr`. The Checkers serve one row
at a time. The check of a level sends 256 rows through them.

## Delayed row start and checker pacing

All rows cannot run their check steps in the same cycle. The controller
therefore produces one micro-operation stream, and row `r` executes it `r*D`
cycles late, taken from a delay line. D is 2 for ECiM and 4 for TRiM (the
length of one row's check sequence). When row 0 does W, row 1 does R, and so
on: exactly one row talks to the Checker in any cycle, which the
`a_one_check_row` assertion enforces. The rows in between keep computing.

This holds across levels only if two level checks start at least `ROWS*D`
cycles apart. Otherwise the last rows of one level's check would overlap the
first rows of the next level's check. A level shorter than that waits at its
check (`chk_stall`). The level-mask table has 4 slots, because a delayed row
may still check level `l` while row 0 has moved on to `l+1`. After `OP_HALT`
the controller drains `(ROWS-1)*D + 2` cycles so that the last row finishes.
Then it raises `done`.

Cycle count of one level with G gates, each naming `w` parity bits: about
`max(G, G*(2w+1)/2)` + D. The second term applies when sides stall. The whole
run ends about `ROWS*D` cycles after the last row-0 step.

## Checkers

* **`ecim_checker`** is combinational syndrome logic with registered outputs
  (latency 1, a new codeword every cycle). It reports:
  * the corrected data;
  * the corrected parity;
  * `err`, and whether the error is in data or parity;
  * the error index and the syndrome.
* **`trim_checker`** takes beats 0, 1 and 2 on consecutive cycles. Its output
  is valid the cycle after beat 2. It reports:
  * the majority;
  * `mismatch`;
  * `bad`, the one copy that disagreed, or 3 if none did or the case is
    ambiguous.

  Assertions check the beat order.

## System

`pim_system` has these defaults: `NUM_TILES=16`, `ROWS=COLS=256`,
`PROG_DEPTH=256`.

* `host_tile` selects the tile that program writes, row writes and row reads
  go to.
* `start` and `scheme` are broadcast to every tile.
* `busy` is the OR of the tiles' busy signals, and `done` the AND of their
  done signals.
* `stats` sums the tiles' counters. `cycles` is the maximum over the tiles,
  not a sum.
* `inj_*` flips one cell of one tile at a clock edge, for error-injection
  tests.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M`. Example for the
reduced-size end-to-end test (2 tiles of 8 rows):

```
verilator --binary --assert -Wno-fatal --top-module tb_pim_system \
    rtl/pim_pkg.sv rtl/ecim_checker.sv rtl/trim_checker.sv rtl/pim_array.sv \
    rtl/pim_controller.sv rtl/pim_tile.sv rtl/pim_system.sv tb/tb_pim_system.sv
./obj_dir/Vtb_pim_system
```

The testbenches are these:

* `tb_ecim_checker`: random codewords with no error, a single error in each
  position, and double errors.
* `tb_trim_checker`: random copies with up to one bad copy.
* `tb_pim_array`: each gate, ping-pong XOR, clr, write and inject.
* `tb_pim_controller`: random layered programs on 8 rows under ECiM and TRiM,
  with injected errors. It checks the results against a software model of the
  circuit, the delay of each row, and the cycle and stall counts.
* `tb_pim_system`: an AND gate built from three NORs (NOT, NOT, NOR) on one
  tile and a random program on the other. ECiM and TRiM alternate, with
  injection. It fails if any mechanism never occurred: side stall, checker
  stall, data fix, parity fix, TRiM fix, or scheme switch.
* `tb_pim_system_full`: the full 16×256×256 system. It runs the AND program
  under ECiM with one data error and one parity error injected. The model
  takes about 35 s to compile and a few seconds to run.

Put `rtl/pim_pkg.sv` first. The other files only need to be in bottom-up
order.

## Departures from the paper and limits

* **The array is a logic model.** Resistance, voltage, sensing, energy, gate
  error rates and the periphery (drivers, sense amplifiers, decoders) are not
  modelled. One gate takes one cycle.
* **Parity blocks.** There is one parity block per side, updated by one chain
  at a time. The paper describes finer schedules that rotate over several
  parity blocks per side. Those are not built, so long-weight gates stall
  more here.
* **Own choices.** These are this design's, not the paper's:
  * the column order of A;
  * the row layout;
  * the program and micro-operation formats;
  * the pacing rule;
  * the choice to write back only data-bit corrections;
  * final parity computed as left XOR right.
* **Codeword size.** One level's codeword is at most 176 data bits (ECiM) or
  85 bits (TRiM) in a 256-column row. A level with more outputs than that
  does not fit. The code is still Hamming(255,247); the unused data bits are
  zero.
* **Multiple errors.** A double error in one level is decoded as a wrong
  single error, as with any Hamming code. TRiM cannot correct two bad copies
  of one bit.
* **Not included.** Only Hamming codes are built, not stronger codes. There
  is no host processor, workload mapping or compiler from circuits to gate
  programs. The benchmark circuits are not included.
* **Synthesis.** The array model is a 64 Ki-cell register array with
  per-row gate logic, so netlist size figures for the full tile are not
  meaningful.
