# A self-timed Tsetlin machine that learns on chip

A Tsetlin machine (TM) classifies binary data with plain propositional logic.
Each *clause* is an AND of some of the input features and their complements.
The clauses vote, and the class is read from the vote count. Small reinforcement
automata, the *Tsetlin automata* (TAs), decide which literals each clause contains.
Every automaton is a saturating counter: its upper half means "include my literal"
and its lower half "exclude it". Learning is a stream of rewards and penalties,
chosen by a fixed payoff scheme and a few random coin tosses.

This RTL builds the learning machine as a self-timed circuit, in the way the
published design proposes. The inference datapath and the feedback logic are
dual-rail. Each bit carries its own validity, so a value moves on as soon as it
is ready and energy is spent only when data moves. The random coin tosses come
from a ring oscillator sampled by the datapath's own handshake, not from an LFSR
per automaton. The automata are a bundled-data register array that shares one
handshake controller. The configuration is the architectural example of the
design:

* one class;
* 3 features (rows) and 3 clauses (columns);
* 2 x 3 x 3 = 18 automata of 6 states each;
* a 4-bit vote count and threshold comparator.

Every size is a parameter.

## 1. Dual-rail values and the four-phase cycle

Each datapath bit is a pair of wires `{t, f}` (`tm_pkg::dr_t`):

| `{t,f}` | meaning |
|---|---|
| `{0,0}` | spacer (no data) |
| `{0,1}` | logic 0 |
| `{1,0}` | logic 1 |

Feedback types and automaton actions use three wires, one-hot, and all-zero
again means spacer. The logic uses only AND and OR of rails. Inversion is a swap
of the two rails. This has two consequences:

* **Spacer in gives spacer out.** The whole datapath returns to zero when its
  inputs do.
* **Early propagation.** An output becomes valid as soon as the valid inputs
  decide it. A clause with one false, included literal resolves to 0 without
  waiting for its other rows. The magnitude comparator stops at the first
  unequal bit.

Because of early propagation, an output can be valid before all its inputs are.
Completion is therefore detected on the *outputs* only (reduced completion
detection). The machine is complete when the class bit and all 18 automaton
actions are valid. It is back at rest when those outputs, the popcount and all
random bits are spacers again. Not waiting for every internal net to return to
zero is a timing assumption. It is the same one the published scheme makes.

## 2. Inference: clauses, vote count, threshold

```
 f_i ──► partial_clause (row i, column j) ──► clause_and (column j) ──► c_j
                                                                        │
      votes: c_j for even j, NOT c_j for odd (negated) j                ▼
                          dr_popcount ──► sum ──► mag_comparator(sum, N_NEG) ──► class
```

* `partial_clause`: `(f OR e0) AND (NOT f OR e1)`. Here `e0` and `e1` are the
  exclude bits of the row's two automata, for literal `f` and for `NOT f`. An
  excluded literal contributes a 1.
* `clause_and`: dual-rail AND over the rows of one column. The false rail is an
  OR, so a clause output of 0 is fast and a 1 is slow. Trained machines activate
  more clauses, so their latency rises with training.
* `dr_popcount`: counts the votes with dual-rail half adders. Even clauses vote
  with their output. Odd clauses are *negated* and vote with its complement.
  The count is therefore `csum + N_NEG`, where `csum` is the signed sum, positive
  minus negated votes, and `N_NEG = N_CLAUSES/2`.
* `mag_comparator`: a chain of bit slices, MSB first. Each slice evaluates only
  if every slice above it found equality. Class 1 collects the `gt` outputs. Class
  0 collects the `lt` outputs and the final `eq`. The threshold operand is
  `N_NEG`, so **class 1 means `csum > 0`**.

## 3. Feedback in three stages

This is the least obvious part of the design. The payoff scheme of the TM is
factored by scope, so that each piece of logic is instantiated as often as its
scope requires:

| stage | instances | inputs | output |
|---|---|---|---|
| FB1 `fb1_tm` | 1 per machine | learn, yexp | type T0 (none), T1 (Type I), T2 (Type II) |
| FB2 `fb2_clause` | 1 per clause | FB1, p2 | type T0/T1/T2 |
| FB3 `fb3_ta` | 1 per automaton | FB2, inc, c, x, p3 | action: inaction / penalty / reward |

**FB1** gives T0 when `learn = 0`, T1 for a positive label and T2 for a negative
one.

**FB2** swaps T1 and T2 on a negated clause. Since polarity is fixed at design
time, this is only wiring. FB2 also stops feedback at random, according to `p2`:
Type I survives when `p2 = 1` and Type II when `p2 = 0`. The machine wants
`P(T1) = (T - clamp(csum))/2T` and `P(T2) = (T + clamp(csum))/2T`, where `clamp`
limits to `[-T, T]`. These two probabilities add up to 1, so one random bit with
`P(p2 = 1) = P(T1)` serves both cases. As the vote approaches the margin `T`,
feedback becomes rare.

**FB3** chooses the action of one automaton. Its inputs are the clause's type,
whether the automaton includes its literal (`inc`), the clause output `c`, the
literal's value `x` (`f` or `NOT f`), and `p3`. The bit `p3` picks the likelier
branch, probability `(s-1)/s`, when 1, and the `1/s` branch when 0:

| FB2 | inc | c | x | p3 | action |
|---|---|---|---|---|---|
| T0 | - | - | - | - | inaction |
| T1 | 1 | 0 | - | 0 / 1 | penalty / inaction |
| T1 | 1 | 1 | - | 0 / 1 | inaction / reward |
| T1 | 0 | 0 | - | 0 / 1 | reward / inaction |
| T1 | 0 | 1 | 0 | 0 / 1 | inaction / reward |
| T1 | 0 | 1 | 1 | 0 / 1 | inaction / penalty |
| T2 | 1 | - | - | - | inaction |
| T2 | 0 | 1 | 0 | - | penalty |
| T2 | 0 | 0 | - | - | inaction |
| T2 | 0 | 1 | 1 | - | inaction (row absent from the source table; chosen here) |

In `fb3_ta`, the FB2 rails enter at the last AND level of each output rail. A
clause that receives T0 therefore finishes all of its automata's stage-3 outputs
in one gate delay.

## 4. Random bits from a sampled oscillator (`prbg`, `prbg_handshake`, `ring_osc`)

Every automaton has its own generator for `p3`, and every clause one for `p2`.
A generator is a ring oscillator whose inverters have unequal rise and fall
times. Each of its taps therefore has a different duty cycle. The generator's
request samples the selected tap:

* a **set-dominant latch** is set while the tap is high. It is reset only while
  the tap and the request are both low.
* a **mutex** arbitrates between the request and the latch output.
* the request's grant drives `ack.f`. The latch's grant, ANDed with the request,
  drives `ack.t`.

A request that arrives in the tap's low phase wins the mutex and returns 0. A
request in the high phase finds the latch already holding the mutex and returns 1.
So `P(1)` is the duty cycle. When the request falls, the output returns to
`{0,0}`. The ring is power-gated. It has no NAND or NOR in the loop, so it
restarts in a random phase, and the model draws that phase at random on every
power-up.

* **p3:** a 1-tap ring at duty `(s-1)/s`. Its request is the data-phase signal.
* **p2:** a ring with `2T+1` taps, where tap `k` has duty `(2T-k)/2T`.
  `p2_select` picks tap `clamp(csum)+T` from the completed count. Its request is
  the completion of the count.

The tap select and the request change at the same instant. If both reach the
sampler together, the latch still holds the level of the *previously* selected
tap. In simulation, that pinned `P(p2)` near the spacer-time tap's duty for
every vote. The request therefore passes through a `matched_delay` first. This
is a bundling constraint that a layout must honour too.

`ring_osc`, `mutex` and `matched_delay` are **behavioural models** with delays
and `$urandom`. The cells they stand for are analog or are sized at layout, so
these three modules cannot be synthesized. Everything else is synthesizable.

## 5. The automata and their array (`tsetlin_automaton`, `ta_array`)

Each automaton is one-hot over six states. `x11 x12 x13` exclude and
`x21 x22 x23` include; `x11` and `x21` sit at the decision boundary. The next
state is:

```
x13 = x13&r | x12&r      x21 = x22&p | x11&p
x12 = x11&r | x13&p      x22 = x21&r | x23&p
x11 = x12&p | x21&p      x23 = x23&r | x22&r
```

* A reward moves away from the boundary and saturates at the ends.
* A penalty moves toward it, and from `x11` or `x21` it crosses the boundary.
* Inaction holds the state.
* Reset puts every automaton in `x11`.

The automata are a *bundled-data* design. A synchronous FSM is split into
master and slave stages, and all of them share one controller. `ta_array`:

* **capture**: latches every automaton's FB3 action once all actions are valid
  (master).
* **commit**: applies the actions once the datapath is back at spacer (slave).

So the exclude bits never change while a value is in flight. The array also
exposes state and exclude bits for reading without disturbing learning.

## 6. One operation (`tm_ctrl`, `tm_top`)

`tm_top` takes single-rail inputs. Pulse `start` with `f`, `learn` and `yexp`.
The sequencer then runs:

| state | what happens | cycles |
|---|---|---|
| ARM | rings powered (learning only) | 1 |
| DATA | `go`=1: inputs leave spacer; wait for `all_valid` | 1 + wait |
| CAPTURE | automata latch their actions; class/sum/FB registered | 1 |
| RTZ | `go`=0: return to zero; wait for `all_spacer` | 1 + wait |
| COMMIT | automata update; `done` | 1 |

`class_out`, `sum_out`, `fb1_out`, `fb2_out` and `act_out` hold from `done`
until the next `start`. Automaton `k = (j*N_FEATURES + i)*2 + l` belongs to
clause `j` and feature `i`, with `l = 0` for `f_i` and `l = 1` for `NOT f_i`.

The clocked sequencer stands in for the handshake environment and for the
matched-delay latch controller of a fully self-timed chip. The dual-rail logic
between the registers is the real self-timed datapath.

## 7. Parameters

| parameter | default | origin |
|---|---|---|
| `N_FEATURES`, `N_CLAUSES` | 3, 3 | architectural example of the design |
| `SUM_W` | 4 | width of the design's comparator schematic |
| `T` (feedback margin) | 2 | chosen here; no value is published |
| `S` (specificity `s`) | 3.9 | chosen here; no value is published |
| `RO_PERIOD` | 997 time units | chosen here |

`SUM_W` must satisfy `2**SUM_W > N_CLAUSES`. Odd clauses are negated.

## 8. How far to trust it, and where it departs from the published design

Tested behaviour:

* Every block has a self-checking testbench. The combinational blocks are
  checked exhaustively, including their spacer and early-propagation behaviour.
* The generators' bias was checked against their duty cycles: 400 samples per
  tap, each within a few percent.
* `tb_tm_top` runs the whole machine at its default size for 3000
  learning/inference operations. A reference model predicts the class, the
  count and every automaton state, and checks every action against the FB3
  table.
* Over that run, every mechanism occurs. This includes p2 stopping feedback,
  the swap on negated clauses, boundary crossings and saturation.
* The machine learns `y = f0 AND NOT f1` to 8 of 8.
* `tb_tm_top_wide` repeats the same per-operation checks at 16 features and
  10 clauses (320 automata), with 14 of the features being random noise. At
  `T = 2` and with only 10 clauses it reaches about 80-85 percent on random
  inputs, so its accuracy bound is only a sanity bound. Its value is that all
  320 automata are compared with the model on every operation.

Departures and own choices:

* The partial-clause, combiner and popcount schematics of the original are not
  available. Their gate arrangement here is functionally equal but not
  gate-equal. In particular, this popcount needs no spacer inverters.
* The comparator threshold is `csum > 0`. With a single negated clause,
  `csum >= 0` cannot express most targets.
* How negative votes reach the popcount is not published. Here they enter as
  inverted clause outputs.
* The FB3 row for Type II with `inc=0, c=1, x=1` is taken as inaction.
* Matched delays are replaced by the sequencer clock for the automata, and by
  a behavioural delay on the `p2` request.
* All clauses evaluate in parallel. This is the contracted form of the tile
  grid, in which features pass to the next clause without waiting for the
  tile's results. The serialized form, where features ripple through the
  clauses one after the other, is not built.
* The automata are grouped in one array outside the clause tiles. Each tile
  keeps only its partial-clause and FB3 logic.
* The quasi-delay-insensitive automaton, which the published design compares
  with the bundled-data one, is not built, nor are the LFSR and synchronous
  baselines.
* Nothing here models gate delays. The latency distributions of the original
  are post-synthesis timing results and are outside what RTL simulation shows.
* To classify the binarized Iris data (16 features), set `N_FEATURES = 16` and
  choose `N_CLAUSES` (at most 15 with `SUM_W = 4`).

## 9. Simulating and changing it

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. With
Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -Irtl -y rtl -y tb +libext+.sv rtl/tm_pkg.sv tb/tb_tm_top.sv \
  --top-module tb_tm_top -o sim
./obj_dir/sim
```

Replace `tb_tm_top` with any other `tb/tb_<module>` to test one block. The full
machine test takes well under a minute.

To change a size, override the parameters of `tm_top`. The checks live in
`tb/tm_top_driver.sv`, which takes the size as parameters; `tb_tm_top_wide`
shows how to pair it with a resized `tm_top`. The wide test takes about two
minutes.
Shared types and the dual-rail helper functions are in `rtl/tm_pkg.sv`.

File map (`rtl/`):

* `tm_top`: the machine.
* `tm_ctrl`: the sequencer.
* `clause_tile`, `sum_tile`: the grid tiles.
* `partial_clause`, `clause_and`, `dr_popcount`, `mag_comparator`: inference.
* `fb1_tm`, `fb2_clause`, `fb3_ta`: feedback.
* `prbg`, `prbg_handshake`, `p2_select`, `ring_osc`, `mutex`, `matched_delay`:
  random bits.
* `tsetlin_automaton`, `ta_array`: the automata.

Testbenches (`tb/`): one `tb_<module>` per module, plus `tm_top_driver`
(stimulus, reference model and mechanism counters for a machine of any size),
which `tb_tm_top` and `tb_tm_top_wide` wrap.
