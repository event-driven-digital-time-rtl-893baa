# Event-driven time-domain inference for a Coalesced Tsetlin Machine

This is a clockless inference engine for a Coalesced Tsetlin Machine (CoTM).
It classifies a Boolean feature vector. The class scores are not compared
with a digital comparator tree. Each class launches a pulse whose delay grows
with its score, and an arbiter picks the pulse that arrives first.

Everything in front of that race is ordinary digital logic: literals, clauses
and weighted class sums. It is moved along by a three-stage bundled-data
asynchronous pipeline with two-phase handshakes, so the circuit only switches
when a sample arrives. The default size is the Iris configuration: 16
features, 12 clauses and 3 classes.

The same pipeline can instead end in a race for a plain multi-class Tsetlin
Machine. There each class's delay is set by a Hamming distance. A top-level
parameter selects it (section 4).

## 1. What is computed

A CoTM is defined by two things:

- **TA states.** Each clause includes or excludes each literal. The literals
  are `x_i` and `~x_i` for every feature `x_i`.
- **Clause weights.** Every clause has a signed integer weight for every
  class.

Inference works in three steps:

1. **Clauses.** A clause is the AND of its included literals. Here a clause
   with every literal excluded outputs 1:
   `clause[j] = AND over l of (literal[l] OR exclude[j][l])`.
2. **Class sums.** `sum[c] = sum over j of clause[j] * w[c][j]`.
3. **Prediction.** The class with the largest sum.

Weights are stored in sign-magnitude form: a sign bit `weight_neg` and a
magnitude `weight_mag` (4 bits by default). For every class the adder splits
the active weights into two unsigned totals:

- `S`, the magnitudes of the active negative weights;
- `M`, the magnitudes of the active positive weights.

The class sum is then `M - S`.

Time only runs one way, so a pulse cannot carry a negative delay. That is why
S and M each get a delay rail of their own, and their arrival difference
carries the sign.

### Logarithmic compression

A delay line proportional to the sum would grow with the largest possible
sum. Instead each total `v` is coded by its leading one:

- `k` is the position of the leading one;
- `f` is the bits below it, normalised to `e = 3` bits;
- so `8k + f ≈ 8·log2(v)`.

The delay line then needs `k` coarse cells of `τ` and `f` fine cells of `τ/8`.
The total delay is at most `8τ` for an 8-bit sum. Sums of 0 and 1 both give
the code 0.

The race therefore compares `(8k_M + f_M) − (8k_S + f_S)`, which is about
`8·log2(M/S)`. That is a log-ratio, not the difference `M − S`.

- The two usually agree on which class wins.
- They need not agree when the S and M of different classes are of very
  different sizes.
- With random models at the Iris size, the decision matched the exact integer
  argmax in about 92 % of samples (367 and 369 of 400 in two runs).
- This is a property of the compression scheme, not a fault of the RTL.
- The end-to-end testbench checks the hardware against the log-domain rule.
  It prints the exact-argmax agreement for information only.

## 2. The asynchronous pipeline

```
 req_in/ack_out             fire0                fire1                fire2
 ────────────► [click 0] ──Delay──► [click 1] ──Delay──► [click 2]
 feature ─► literal gen ─►REG─► clause AND ─►REG─► mult, S/M, LOD ─►REG─► race ─► target_class
                                                                            └► TFF ─► req_out
```

`click_element` is the two-phase click stage:

- `fire = (req_in ^ phase_in) & ~(ack_in ^ phase_out)`;
- the rising edge of `fire` toggles both phase bits;
- that rising edge is also the local clock of the stage's data register
  (`pipe_reg`).

A stage fires when a new request has arrived and its previous output has been
acknowledged. So a full downstream stage holds the upstream one. This is the
back-pressure stall, and up to three samples are in flight at once.

`matched_delay` sits on each request between stages. It must be at least as
slow as the logic of the stage it covers (400 ps by default). The phase
registers are seen through a modelled 50 ps clock-to-output delay, which gives
`fire` a finite width. Synthesis ignores that delay.

The stage-to-stage latency is therefore `T_CQ + MATCH_DELAY`.

The last stage does not use click 2's own output request. The result is ready
only when the time-domain race has finished. So `req_out` comes from the
classifier's toggle flip-flop, and click 2's acknowledge input is the
consumer's `ack_in`.

**Rule for the environment.** A producer may change `feature` only after
`ack_out` has answered its previous request. A consumer reads `target_class`
when `req_out != ack_in`, then toggles `ack_in`. This is the usual two-phase
bundled-data protocol.

## 3. The race (cotm_classifier)

`fire2` registers the `(k, f)` codes of every class and then starts a
four-phase cycle. Each step is a Muller C-element (`muller_c`, in
`race_control`):

| step | event | generated by |
|---|---|---|
| 1 | `race_dr` rises | C(fire2, ¬dr_done) |
| 2 | every class: `race_s`, `race_m` arrive after `T_CELL + kτ + fτ/8` | `diff_delay_path` ×2 per class |
| 3 | `dr_done` rises when all 2m rails are high | C-element over all rails |
| 4 | the TDC of each class latches `dc = (t_M − t_S)/(τ/8)` | `vernier_tdc` |
| 5 | `race_sr` rises | C(dr_done, ¬sr_done) |
| 6 | each class's `race_class` arrives after `T_CELL + (63 − dc)·UNIT` | `dcde` |
| 7 | the first arrival is granted (`wta_mesh`) | `wta_mesh` |
| 8 | `sr_done` rises once the grant is there and every `race_class` has arrived; `target_class` is captured | C(OR grants, C(all race_class)), `phase_interface` |
| 9 | `race_sr` falls, then every `race_class` line in arrival order, then the grants and `sr_done` (`race_dr`, the rails and `dr_done` have already returned after step 3) | the same C-elements, return to zero |
| 10 | `req_out` toggles on `sr_done` falling | `phase_interface` (TFF) |

Two details of this sequence are easy to miss:

- **The TDC code sign.** A positive `dc` means the M rail arrived later, so
  the class sum is more positive. The DCDE delay falls as `dc` grows, which
  makes the highest class arrive first.
- **Why `sr_done` waits for the slowest class.** Releasing `race_sr` as soon
  as the winner is granted looks natural, but it is wrong. A losing class's
  pulse may still be inside its delay line at that moment. That pulse comes
  out later and would win the next cycle's race. So `sr_done` combines two
  things: the OR of the one-hot grants (a C-element over them alone could
  never rise), and a C-element over all `race_class` lines.
- **The grant can move on release.** The lines return to zero in arrival
  order. The winner's grant drops first, and the mutexes may briefly hand the
  grant to the runner-up. `target_class` was captured earlier, on the rising
  edge of `sr_done`, so this does no harm. It does mean the `grant` port is
  only meaningful while `sr_done` is high and before the lines fall.

The winner-takes-all arbiter is a mesh:

- there is one `mutex` for every pair of classes, m(m−1)/2 in total;
- a class is granted when it wins every mutex it takes part in;
- at any time at most one class can hold all of its pairs;
- an assertion checks that the grant is one-hot.

With `WTA_TREE = 1` a tree arbiter (`wta_tree`) replaces the mesh, in
either classifier:

- the classes are the leaves of a binary tree with m − 1 cells;
- each cell has one mutex between its two subtrees, and passes the OR of the
  mutex outputs up as its own request, so only a local winner climbs;
- the root grants its own request, and each cell ANDs the grant from above
  with its mutex outputs to steer it down to the winning side;
- when m is not a power of two, the empty subtrees are dropped and each
  bypassed level is a one-mutex delay, so every class sits at the same
  depth and ties still go to the lower index.

The mesh decides in one mutex delay. The tree takes one mutex delay per
level, ⌈log2 m⌉ in all, but needs only m − 1 mutexes instead of m(m−1)/2.
The published cell also contains a C-element. Here the steering is done
with AND gates instead. A C-element there would keep a class granted
after its race line fell, for as long as the grant above stays high.

The latency from `fire2` to the grant is
`T_CELL + max(code)·τ/8 + T_CELL + (63 − best)·UNIT + T_MUTEX` with the mesh
(⌈log2 m⌉·`T_MUTEX` at the end with the tree). Here
`max(code)` is the largest rail code of any class and `best` is the winning
class's `dc`. `cotm_classifier_tb` checks this latency to the picosecond.

## 4. The multi-class TM race (hd_classifier)

With `COALESCED = 0` the top builds `hd_classifier` instead of
`cotm_classifier`. The two share the front end, the click pipeline and the
output handshake. This mode models a plain multi-class Tsetlin Machine:

- every clause belongs to one class;
- clause `j` belongs to class `j / (NUM_CLAUSE / NUM_CLASS)`;
- within a class, the first half of the clauses vote for it and the second
  half against;
- the weight ports are unused.

The class score is (positive clauses that fired − negative clauses that
fired). With equal halves, the highest score is the same as the smallest
Hamming distance between the class's clause outputs and the ideal pattern
(positives 1, negatives 0). So:

1. Each clause is XORed with its polarity into a mismatch bit, and the bits
   are registered on `fire2`.
2. `race = C(fire2, ¬done)` launches one `hd_delay_line` per class. A line's
   delay is `T_CELL + mismatches·HD_UNIT`.
3. The same mesh arbiter grants the first arrival.
4. `done = C(OR grants, C(all lines))` releases the race and drives the same
   toggle interface as the CoTM race.

The latency from `fire2` to the grant is
`T_CELL + min_distance·HD_UNIT + T_MUTEX`. Ties go to the lower class.

## 5. Timing parameters

All of these live in `rtl/tm_pkg.sv` and are passed down as module
parameters:

| parameter | default | meaning |
|---|---|---|
| `NUM_FEATURE`, `NUM_CLAUSE`, `NUM_CLASS` | 16, 12, 3 | Iris configuration |
| `E_BITS`, `K_BITS` | 3, 3 | fine and coarse code widths |
| `SUM_W` | 8 | S and M width (= 2^K_BITS); sums saturate |
| `WMAG_W` | 4 | weight magnitude width |
| `DC_W` | 7 | signed TDC code, ±63 |
| `TAU_PS` | 80 | coarse delay cell τ; fine cell τ/8 = 10 ps = TDC LSB |
| `DCDE_UNIT_PS` | 5 | DCDE delay per code step |
| `MATCH_DELAY_PS` | 400 | request delay between click stages |
| `T_CQ_PS`, `T_CELL_PS`, `T_MUTEX_PS` | 50, 20, 2 | register, intrinsic cell and mutex delays |
| `HD_UNIT_PS` | 40 | multi-class race: delay per clause mismatch |
| `COALESCED` (top only) | 1 | 1: CoTM race, 0: multi-class TM race |
| `WTA_TREE` (top and classifiers) | 0 | 0: mesh arbiter, 1: tree arbiter |

`TAU_PS` must be a multiple of 2^E_BITS, and `SUM_W` must not exceed
2^K_BITS. Elaboration-time assertions check both. With 12 clauses and 4-bit
magnitudes a sum is at most 180, so the defaults never saturate.

## 6. What is logic and what is a timed model

These parts are synthesizable logic:

- `click_element`, `async_controller`, `pipe_reg`;
- `clause_evaluation`, `binary_mult_matrix`, `sign_mag_sum`, `lod`;
- `muller_c` (a latch), `race_control`, `wta_mesh`, `phase_interface`,
  `hd_classifier` (apart from its delay lines).

The delay-based parts are behavioural models with delays. They simulate the
right timing but do not synthesize into the real circuit:

- `matched_delay`, `diff_delay_path`, `dcde` and `hd_delay_line` are delay
  lines.
- `vernier_tdc` time-stamps its two rising edges. It has no conversion time.
- `wta_tree` is logic around `mutex` instances, plus a one-mutex delay on
  each bypassed level.
- `mutex` stands in for a NAND SR latch with an analogue metastability
  filter. An exact tie goes to the lower class.

In silicon these are full-custom cells, and their delays would have to be
characterised and the matched delays sized to the stage logic.

## 7. Where this RTL interprets or departs from the published architecture

- **S and M.** The published text says S collects the "sign" contributions
  and M the "magnitude" contributions. Here that is read as:
  - S is the total magnitude of the negative weights;
  - M is the total magnitude of the positive weights;
  - so the class sum is M − S.
- **Register placement.**
  - The pipeline registers sit after literal generation (fire0), after the
    clause AND (fire1) and after the LOD (fire2), as the block diagrams draw
    them.
  - The pseudocode instead registers clauses already on fire0.
- **TA encoding.** TA bit 1 means the literal is excluded. An empty clause
  outputs 1, exactly as the published formula `AND(literal OR TA)` gives.
- **Model storage.** Clause and weight storage is not specified. TA states
  and weights are top-level ports and must be held steady.
- **LOD zero input.** A zero sum is coded like a sum of 1.
- **Guessed values.** All delay values, the DCDE code-to-delay mapping, the
  TDC sign convention and the TFF edge were chosen here.
- **Reset.** An active-high asynchronous reset clears the phase registers,
  data registers, C-elements and the result. The published design does not
  describe one.
- **Multi-class TM race.** Its circuit is only referred to, not specified.
  The mismatch-counting delay line and the clause grouping are the simplest
  construction that matches the published description, a delay driven by
  the Hamming distance.
- **Release of the single-rail race.** Waiting for every class line (section
  3) is added here. Without it a late losing pulse leaks into the next
  inference.
- **Tree arbiter cell.** The cell is built from a mutex, an OR gate and AND
  gates. The published cell lists a C-element, but does not say where it
  sits (section 3).

## 8. Simulating

Every testbench is self-checking. Each prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog if
something hangs. With Verilator 5 (`--timing` is required for the delays;
`-Wno-fatal` is needed because the delay models compute their delays at run
time, which Verilator reports as a `ZERODLY` warning):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/tm_pkg.sv tb/tm_top_tb.sv \
          --top-module tm_top_tb -Mdir obj_tm_top
obj_tm_top/Vtm_top_tb
```

Replace `tm_top` with any block name for its unit test. Verilator has two
states, so add `+verilator+rand+reset+2` to start undriven state at random
values. This checks that reset and initialisation cover everything that is
read.

| testbench | what it checks |
|---|---|
| `tm_top_tb` | Full Iris size with no parameter overrides. 400 random samples through a random model (redrawn until every class wins part of a trial batch), with a consumer that sometimes stalls for several ns and a producer that sometimes lets the pipeline drain. Every result is checked against a reference model. It counts and requires back-pressure stalls, overlapping samples, drained pipeline, both LOD shift directions, negative and positive class codes, and wins by every class. |
| `tm_top_mc_tb` | The same end-to-end test with `COALESCED = 0`, the tree arbiter (`WTA_TREE = 1`) and 12 clauses per class (`NUM_CLAUSE = 36`), against a vote-count reference. It requires stalls, overlap, drain, ties and wins by every class. |
| `hd_classifier_tb`, `hd_delay_line_tb` | Multi-class race: class, exact `fire2`→grant latency, ties, and delay per mismatch. |
| `cotm_classifier_tb` | The worked 4-clause example (weights (−3,−2,1,4), (3,0,2,−4), (−3,1,4,3), clauses 1001 → class 0), then random models. Checks the class and the exact `fire2`→grant latency. |
| `async_controller_tb`, `click_element_tb` | Handshake order, stage latency `T_CQ + MATCH_DELAY`, and that three tokens are held when the consumer blocks. |
| `race_control_tb`, `phase_interface_tb`, `muller_c_tb` | The four-phase sequence, including that `sr_done` waits for the slowest class, one `req_out` toggle per cycle, and the C-element truth table. |
| `lod_tb`, `sign_mag_sum_tb`, `binary_mult_matrix_tb`, `clause_evaluation_tb`, `pipe_reg_tb` | Exhaustive or random comparison with independent reference code. |
| `diff_delay_path_tb`, `vernier_tdc_tb`, `dcde_tb`, `matched_delay_tb`, `mutex_tb`, `wta_mesh_tb`, `wta_tree_tb` (3 and 5 classes) | Delays to the picosecond, TDC rounding and saturation, first-arrival and tie behaviour of the arbiters. |

A full `tm_top_tb` run simulates about 0.9 µs and takes well under a second.

## 9. Changing it

- **Problem size.** Change `NUM_FEATURE`, `NUM_CLAUSE` and `NUM_CLASS`.
  `wta_mesh` generates its m(m−1)/2 mutexes and `wta_tree` its m − 1 cells for any m.
- **Larger sums.** Raise `K_BITS`; `SUM_W` follows as 2^K_BITS. `DC_W`
  follows from `K_BITS + E_BITS + 1`.
- **Finer resolution.** Raise `E_BITS`, and keep `TAU_PS` a multiple of
  2^E_BITS.
- **Logic changes.** Keep `MATCH_DELAY_PS` above the slowest stage if you
  change the logic.
- **Weight width.** With wider weights, check that `NUM_CLAUSE·(2^WMAG_W−1)`
  still fits in `SUM_W`, or accept saturation.
