# Pinball: a streaming surface-code predecoder in SystemVerilog

A surface-code quantum memory produces one round of syndrome bits every
microsecond, and a full matching decoder at room temperature is too slow and
too far away for the whole stream. Most rounds only contain a few short,
isolated error chains. A small predecoder placed next to the qubits can
resolve those locally. It then has to send the raw syndromes up to the large
decoder only for the rare blocks it cannot explain.

This RTL is such a predecoder for one logical qubit of a rotated surface code
of odd distance `d`, under circuit-level noise. It sees two consecutive
syndrome rounds at a time: the previous round `S_{i-1}` (what was left of it)
and the new round `S_i`. It looks for every pattern that one physical fault
can leave behind:

* a data-qubit error (two neighbouring syndromes in one round, or a single
  one at the lattice edge);
* a measurement error (the same syndrome in two rounds);
* a gate error that shows up diagonally across two rounds;
* a hook error, where a fault on an ancilla spreads to two data qubits.

Each pattern it finds is cleared and turned into a correction. Anything left
over marks the round as *complex*. When a block of `d` rounds contains a
complex round, the raw syndromes of that block are queued for the
room-temperature decoder.

The design also exploits the fact that only the last round of a block is
latency-critical. The first `d-1` rounds run at a low supply and a slow clock.
The supply, the body bias and then the clock are raised only for round `d`.

Only the decoding graph for Z errors is built, which is the graph of the X
ancillas. X errors are decoded the same way on the other ancilla set, by a
second instance with its own numbering.

## Lattice, vertices and qubit numbering (`pinball_pkg`)

Data qubits sit on a `d x d` grid at `(r, c)`, with row 0 at the top. Data
qubit `(r, c)` has bit index `q = r*d + c` in every correction vector.

The plaquette whose top-left corner is data qubit `(r, c)` is called
plaquette `(r, c)`. It is an X plaquette when `r + c` is even. The two-qubit
X plaquettes on the top and bottom boundaries are rows `r = -1` and
`r = d-1`.

There are `d+1` rows of `(d-1)/2` X plaquettes, so `N = (d^2-1)/2` vertices
in all. Vertex `(r, c)` has bit index `n = (r+1)*(d-1)/2 + c/2` in every
syndrome vector; for `d = 5` this gives vertices 0..11 row by row. The
package functions `node_r`, `node_c`, `node_at` and `data_at` convert between
the two numberings. Every stage computes its wiring from them at elaboration
time, so nothing is tabulated and any odd `d` works.

Two vertices that share a data qubit are diagonal neighbours. Vertex `(r, c)`
has up to four of them: `(r±1, c±1)`.

## The predecoding primitive (`predecode_primitive`)

A primitive watches one pair of syndromes, the *center* and the *neighbor*.
If both are set, an AND gate raises `correction` and two XOR gates clear both
syndromes. The clearing matters: a syndrome that has already been explained
cannot be explained a second time by a later primitive. The primitive is two
gate levels of combinational logic.

## The nine stages and why they are split the way they are

Two primitives that share a syndrome must not run in the same cycle. If they
did, one active syndrome could be matched with several partners at once and
receive several contradictory corrections. The primitives are therefore
sorted into nine groups, each free of conflicts inside itself, and each group
becomes one pipeline stage. In each row below, "partner" is the other
syndrome of the pair and "corrected qubit(s)" is what the stage flips when
the primitive fires.

| stage | module | pair (center in `S_i` unless noted) | partner | corrected qubit(s) |
|---|---|---|---|---|
| M | `stage_m` | `S_i(r,c)` | `S_{i-1}(r,c)` | none: a measurement error leaves the data intact |
| B(1) | `stage_b #(.GROUP(1))` | `(r,c)`, `r` even, `r >= 0` | `S_i(r-1,c+1)` | `(r, c+1)` |
| B(2) | `stage_b #(.GROUP(2))` | `(r,c)`, `r` even | `S_i(r+1,c+1)` | `(r+1, c+1)` |
| B(3) | `stage_b #(.GROUP(3))` | `(r,c)`, `r` odd | `S_i(r-1,c+1)` | `(r, c+1)` |
| B(4) | `stage_b #(.GROUP(4))` | `(r,c)`, `r` odd or `r = -1` | `S_i(r+1,c+1)` | `(r+1, c+1)` |
| ST(1) | `stage_st #(.GROUP(1))` | `S_i(r,c)` | `S_{i-1}(r-1,c+1)` | `(r, c+1)` |
| ST(2) | `stage_st #(.GROUP(2))` | `S_i(r,c)` | `S_{i-1}(r-1,c-1)` | `(r, c)` |
| H | `stage_h` | `S_i(r,c)` | `S_{i-1}(r-2,c)` | `(r-1, c)` and `(r, c)` |
| E | `stage_e` | `S_i(r,c)` with `c = 0` or `c = d-2` | constant 1 | `(r, 0)` or `(r+1, d-1)` |

The table follows these rules:

* **Space-like edges (B).** A bulk vertex has four neighbours in its own
  round. Splitting the edges by direction (up-right or down-right) and by the
  parity of the row gives four groups in which no vertex appears twice. The
  corrected qubit is the one the two plaquettes share.
* **Single-qubit spacetime edges (ST).** These pair a vertex of the new round
  with a diagonal neighbour one row up in the old round. The two directions
  form the two stages.
* **Hook edges (H).** These pair a vertex with the vertex two rows above it,
  one round earlier. Each one corrects the two data qubits in the left column
  between them.
* **Edge space-like errors (E).** A data qubit in the leftmost or rightmost
  column touches only one X ancilla. Its error lights a single syndrome, which
  stage E pairs with a neighbour that is always active.

**Stage order.** The stages run in the order M, B(1)–B(4), ST(1), ST(2), H,
E. Time-like errors go first because they are the most frequent class.
Single-syndrome edge matches go last, because they explain only one syndrome
per assumed fault and are the least specific.

**Stage E acts on `S_i`.** Stage E pairs the boundary vertices of the new
round, so a boundary error is corrected in the round it appears. A boundary
syndrome left over from `S_{i-1}` at that point makes the round complex.

**Stage interface.** All stages share one interface: `s_prev_i`, `s_cur_i`,
`corr_i` in and `s_prev_o`, `s_cur_o`, `corr_o` out. Each stage is purely
combinational. A fired primitive XORs its bit into the running correction
vector, so two corrections of the same qubit within a round cancel, as two Z
flips do.

## Pipeline, feedback and round timing (`pinball_pipeline`)

The nine stages are chained, with a register after each of the first eight.
The structure `{valid, last, round, S_{i-1}, S_i, corr}` travels down the
chain. On the ninth clock edge:

* the round's corrections and complex flag are registered as the output;
* what is left of `S_i` is written into the `S_{i-1}` register, where it waits
  as the "previous round" of the next round.

After the last round of a block, the `S_{i-1}` register is cleared instead, so
blocks are independent.

The next round cannot start before this feedback exists. So one round is in
flight at a time: `in_ready` is high only while the pipe is empty, and a
round takes nine cycles from acceptance to `out_valid`. At the paper's clocks
that is 720 ns at 12.5 MHz (low-power mode) and 90 ns at 100 MHz
(high-performance mode). Both fit a 1 µs syndrome period.

**Complex detection (`complex_detect`).** This is a single OR reduction over
the residual `S_{i-1}`. In the last round of a block it also covers the
residual `S_i`, since no later round will get a chance to explain it. A
residual in an earlier round's `S_i` is not an error: the next round may
still pair it with a measurement, spacetime or hook partner.

## Block results and offload (`correction_buffer`, `syndrome_buffer`)

**`correction_buffer`** is the `d x d` correction store. It XORs each round's
corrections into an accumulator and ORs the round complex flags. One cycle
after the last round of a block, it pulses `blk_valid` with the block's
corrections and `blk_complex`, then starts over. The outputs hold until the
next block ends. When `blk_complex` is set, the corrections are not to be
used: the full decoder will produce the block's answer from the raw data.

**`syndrome_buffer`** keeps the unmodified syndromes, since those, not the
cleared ones, are what the full decoder needs. It has two banks of `d`
rounds, so one block can be written while the previous one waits for its
verdict or is being sent. On a clean verdict the bank is freed. On a complex
verdict the bank is streamed out one round per word on
`off_valid/off_ready`, with `off_round` giving the round index and `off_last`
marking the block's final round.

If the link stalls long enough that both banks are busy, `wr_ready` drops and
the top stops accepting syndromes. The assertion `a_verdict_on_full`
checks that a verdict never arrives for a bank that is not waiting.

## Low-power and high-performance modes (`dvfs_controller`, `vf_lut`)

**`dvfs_controller`** is a four-state machine: `LP`, `RAISE`, `HP`, `LOWER`.

* **Raising.** When the penultimate round (index `d-2`) leaves the pipeline,
  the supply and body-bias selects go to HP. After `SETTLE_CYCLES` cycles
  (three cycles of 80 ns, covering the 200 ns a power multiplexer needs), the
  clock select follows.
* **Lowering.** When round `d-1` leaves, the clock is dropped first and the
  supply one cycle later.

Because of this ordering, the fast clock never runs on the low supply;
assertion `a_clk_needs_vdd` checks it. While a switch is being decided or is
in progress, `hold` is high, and the top refuses new rounds so that none is
processed across a change of operating point.

**`vf_lut`** holds the two operating points as
`{vdd_mv, vbn_mv, vbp_mv, freq_100khz}`:

* LP: 480 mV, +300 mV NMOS body bias, −300 mV PMOS body bias, 12.5 MHz.
* HP: 800 mV, no body bias, 100 MHz.

Both entries can be rewritten through `cfg_we/cfg_addr/cfg_data`, so the
points can be recalibrated for each die. The supply and body-bias point
follows `vdd_sel`. The frequency follows `clk_sel`.

The supply multiplexer, the body-bias multiplexers and the clock generator
themselves are analog or unspecified. The top brings out their selects and
the table values as ports.

## Top level (`pinball_top`)

`pinball_top #(.D(21))` connects the pipeline, both buffers, the mode
controller and the table:

* **Input.** Syndromes come in on `syn_valid/syn_ready/syn_data`, one round
  per transfer. `syn_ready` is the AND of pipeline ready, raw-buffer ready
  and not `hold`. A round is written into the raw buffer in the same cycle it
  enters the pipeline.
* **Per-round status.** This comes out on `round_valid/round_complex/round_idx`.
* **Per-block result.** This comes out on `blk_valid/blk_complex/blk_corr`.
* **Offload.** Complex blocks leave on the `off_*` stream.
* **Mode selects and table values.** These are `vdd_sel_hp`, `bb_sel_hp`,
  `clk_sel_hp`, `supply_point` and `clk_freq_100khz`.

All state is reset by a synchronous, active-low `rst_n`.

Sizes at the default `D = 21`:

* 220 syndrome bits and 441 data qubits;
* about 1.6 k flip-flops, of which 9 × (220 + 220 + 441) sit in the pipe;
* a raw buffer of 2 × 21 × 220 bits.

## What follows the paper and what does not

Taken from the paper:

* the primitive;
* the nine stage groups and their order;
* pairing of only two consecutive rounds;
* the clear-after-match rule;
* complex detection by an OR over the leftovers;
* nine cycles per round;
* LP operation for `d-1` rounds and HP for the last;
* the 200 ns settling time;
* the two operating points, 0.48 V / 12.5 MHz with forward body bias and
  0.8 V / 100 MHz.

Choices made here where the paper gives only the function or is silent:

* **Geometry.** Vertex and qubit numbering, and the exact edge-to-qubit
  mapping for each group, are derived from the lattice geometry. The
  corrected qubit is always the one the two plaquettes share. For hook edges
  it is the left pair of qubits between the two plaquettes.
* **Merging corrections.** Corrections are combined by XOR.
* **Stage E and the feedback tap.** Stage E works on the new round. The
  feedback register takes `S_i` after stage E.
* **Buffers.** The correction buffer and the two-bank raw buffer, with their
  handshakes and offload format, are choices made here.
* **Mode switching.** The switch starts when the penultimate round finishes,
  not exactly 200 ns before its end. The hold interlock, the clock-first
  order when lowering, and the table field widths are also choices made here.
* **One graph per instance.** Only the Z-error graph is built per instance.

Not built: the analog power and body-bias multiplexers, the clock source, the
qubit readout, the cryogenic link to room temperature, and the second-level
matching decoder.

## Verification

Every module has a self-checking testbench in `tb/`. The class `pinball_ref`
in `tb/tb_ref_pkg.sv` is a behavioural reference model. It is written
independently of the RTL, from lattice coordinates: it applies the stage
rules one primitive at a time, in order.

* **Stage testbenches** (`tb_stage_*`) run each stage at `d = 5` and
  `d = 21`. They use directed pairs read off small lattice drawings, plus
  random syndrome vectors of several densities.
* **`tb_pinball_pipeline`** checks the nine-cycle latency, one round per nine
  cycles, and every stage firing.
* **The buffer, controller and table testbenches** check handshakes, stalls,
  mode sequences and timing cycle by cycle.
* **`tb_pinball_top`** (`d = 5`, 40 blocks) runs the whole design. It builds
  blocks from injected faults: data, measurement, spacetime and hook errors,
  plus dense noise. It checks:
  * every round, block and offloaded word against the model;
  * that isolated data errors are corrected exactly;
  * that measurement errors alone need no correction.

  It counts each mechanism and fails if one never happens: each stage firing,
  complex rounds and blocks, offload, back-pressure, raw-buffer full, the
  mode-switch hold, both mode transitions, and a table rewrite.
* **`tb_pinball_full`** does the same at the default `d = 21` with no
  parameter override.
* **`tb_pinball_workloads`** runs one top per configuration, all in
  parallel: every odd code distance from 3 to 21 at error rate `p = 1e-3`,
  and `d = 11` at `p = 1e-4` and `5e-4`. Its helper `pinball_workload_run`
  injects every single-fault type independently at rate `p` per location
  and round. It checks all results against the model and prints the share
  of blocks resolved without offload. This fault model is flat, so those
  shares only show the trend: fewer blocks stay local as `d` or `p` grows.
  They do not reproduce a circuit-level noise study.

Each testbench prints `TB_RESULT checks=<n> failures=<m>`.

To simulate with plain Verilator, for example the top at `d = 5`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/pinball_pkg.sv tb/tb_ref_pkg.sv tb/tb_pinball_top.sv --top-module tb_pinball_top
./obj_dir/Vtb_pinball_top
```

To change the code distance, override `D` on `pinball_top`: any odd value of
3 or more. Other timing needs other values in two places:

* a different clock ratio means a different `SETTLE_CYCLES` in
  `dvfs_controller`;
* a different calibration means new reset values `VF_LP_DEFAULT` and
  `VF_HP_DEFAULT` in `pinball_pkg`.

Lint reports two unconnected-pin warnings, which are intentional. They are
the unused correction output of the M-stage primitives and the unused
artificial-neighbour output of the E-stage primitives.
