# Probabilistic saturating counters with a differential-privacy guarantee

A 2-bit saturating counter is the basic cell of a dynamic branch
predictor. In a conventional counter the next state is fully determined by
the current state and the branch outcome. That makes it a side channel. An
attacker who shares the predictor entry with a victim can do the following:

1. Prime the counter into *strongly taken* with a series of taken branches.
2. Let the victim execute its secret-dependent branch once.
3. Probe with not-taken branches, counting mispredictions until the first
   correct prediction (the *cut-off point*).

With a conventional counter the count is exactly 2 if the victim's branch
was taken and exactly 1 if it was not, so the attacker reads the secret
bit with certainty.

This RTL implements the defence described by Liu, Zhao, Yang, Wang, Hou,
Zhang and Zhan in "Defensive Design of Saturating Counters Based on
Differential Privacy". The counter's transitions are made random, with two
parameters:

* **m**, the update probability. Every transition is carried out only with
  probability m, otherwise the counter keeps its state. Setting p = 0 gives
  the earlier *probabilistic saturating counter* (PSC).
* **p**, a reversal probability that applies only to the two strong
  states. In ST, a taken outcome (which would normally leave the counter
  in ST) still moves it to WT with probability m·p. A not-taken outcome
  moves it to WT only with probability m·(1−p). SN behaves the same way
  with the directions swapped.

p is the new ingredient. With p = 0 the attacker still wins outright
whenever it observes a count of 1, because a taken victim leaves the
counter in ST and then at least two probes must mispredict. With p > 0
every count can occur for both victim directions. With m = p = ½ the two
count distributions are identical, so the attacker's best guess is right
only half of the time: (0,0)-differential privacy.

The price is prediction accuracy. The strong states now drift away from
the branch's bias.

The RTL provides:
* the counter's next-state logic and its random source;
* a stand-alone counter;
* a Tournament branch predictor whose prediction counters are all
  probabilistic.

The parameters m and p are run-time inputs. The same hardware acts as a
conventional counter (m = 1, p = 0), as the earlier PSC (p = 0), or as
the new counter.

## The counter

States and encoding: SN = 00, WN = 01, WT = 10, ST = 11. The MSB is the
prediction.

The underlying deterministic machine is not the plain up/down counter: a
weak state jumps to the *opposite strong* state.

| state | on T (taken) | on NT (not taken) |
|-------|--------------|-------------------|
| ST    | ST           | WT                |
| WT    | ST           | SN                |
| WN    | ST           | SN                |
| SN    | WN           | SN                |

The probabilistic counter keeps the same destinations. What changes is how
likely each move is:

| state | outcome agrees with state | outcome disagrees |
|-------|---------------------------|-------------------|
| ST / SN | moves to WT / WN with probability **m·p** | moves to WT / WN with probability **m·(1−p)** |
| WT / WN | (T in WT, NT in WN) moves to ST / SN with probability **m** | moves to SN / ST with probability **m** |

When the move does not happen, the state is kept.

Parameter settings studied for this counter:

| (m, p) | property | note |
|--------|----------|------|
| (1, 0) | conventional counter | baseline |
| (0.5, 0) | earlier PSC | count 1 still betrays a not-taken victim |
| (0.5, 0.5) | (0, 0)-DP | attack success ½; costs about 24 % IPC on SPEC CPU 2017 in the authors' evaluation |
| (0.5, 0.1) | (0, 0.2)-DP | about 1.8 % IPC cost in that evaluation |
| (0.5, 0.28), (0.5, 0.72), (0.8, 0.4), (0.8, 0.6) | (0.1, 0.1)-DP | |

In the steady state, for a branch taken independently with probability s,
the misprediction rate depends on s and p but not on m. Write t = 1−s and
q = 1−p. Then:

    A = q·s + p·t,   B = q·t + p·s
    r = s·t·(A(1+B) + B(1+A)) / (s·A(1+B) + t·B(1+A))

### How a probability becomes hardware (`psc_update`)

Each update consumes one uniform random number `rnd` of PROB_W = 16 bits.
The move probability `thr` is chosen by the state and the outcome:

* m in a weak state;
* m·p in a strong state whose outcome agrees with it;
* m − m·p in a strong state whose outcome disagrees.

The transition happens when

    rnd >= 2^16 − thr

This is "the random number is bigger than the threshold 1 − thr". Exactly
`thr` of the 2^16 possible numbers satisfy it, so the probability is
thr/2^16 with no bias. m and p are 17-bit values (1 integer bit, 16
fraction bits), so 0 and 1 are both exact. m·p is the product shifted
right by 16, rounded down. One comparator, one 17×17 multiplier and a
3-way threshold multiplexer are all the probabilistic hardware a counter
needs. In a table, this logic is shared by all entries, because only the
entry being updated needs it.

Fixed-point values of the settings above:

| value | fixed point (of 65536) | actual |
|-------|------------------------|--------|
| 0.5 | 32768 | 0.5 (exact) |
| 0.8 | 52429 | 0.800003 |
| 0.4 | 26214 | 0.399994 |
| 0.1 | 6554 | 0.100006 |

### Random source (`psc_rng`)

The random source is a 32-bit xorshift generator (shifts 13, 17, 5; period
2^32 − 1). The 16-bit number is the top half of its state word. It
advances by one step per update. Reset loads a non-zero SEED parameter.

xorshift was chosen over a one-bit-per-cycle LFSR because consecutive
LFSR words are shifted copies of one another. That correlation would show
up in the counter's statistics. The generator is not cryptographic. A
product facing a determined attacker should replace it with a
true-random or cryptographically seeded source. Only the interface
(`step`, `rnd`) has to be kept.

## The predictor around it (`tournament_psc`)

The counters are placed in a Tournament predictor, which has three parts:

* **Local predictor.** A local history table of 2048 × 11-bit histories,
  indexed by `pc[12:2]`. The history indexes a local PHT of 2048 counters.
* **Global predictor.** A 13-bit global history register indexes a global
  PHT of 8192 counters.
* **Choice PHT.** 4096 2-bit choice counters, indexed by the low 12 bits of
  the global history. States 11/10 select the global prediction, 01/00 the
  local one.

In total this is 51200 bits, or 6.25 KiB. That is the size of the
6.3 KB predictor the counters were evaluated in. The split between the
tables and the index functions are this design's choices.

Every local and global PHT update goes through `psc_update`. The two PHTs
have separate random sources with different seeds. The choice counters
stay deterministic. They move one step towards the global side when only
the global prediction was right, and one step towards the local side when
only the local one was. They are trained only when the two predictions
disagree.

**Timing.** The predictor is trace driven, one branch per cycle:

* Present `br_valid`, `br_pc` and `br_taken`.
* `pred_taken` and `pred_global` are combinational from `br_pc` and the
  current tables. They are the prediction made before this branch's own
  update.
* At the clock edge the chosen local and global counters are updated, the
  choice counter is trained when needed, and the outcome is shifted into
  the local and global histories. History is updated at resolution, not
  speculatively.

**Reset.** A synchronous active-low `rst_n` starts a clearing sweep. The
sweep writes one index of every table per cycle: histories to 0 and all
counters to 01 (WN). It lasts 2^GHIST_BITS = 8192 cycles. `init_busy` is
high during the sweep, and `br_valid` is ignored until it falls.

## Modules

| file | what it is |
|------|------------|
| `rtl/psc_pkg.sv` | state enums, the deterministic transition function, `PSC_PROB_W` |
| `rtl/psc_rng.sv` | xorshift32 random source |
| `rtl/psc_update.sv` | probabilistic next-state function (combinational) |
| `rtl/psc_counter.sv` | one complete counter: register + `psc_rng` + `psc_update`, reset to WN |
| `rtl/choice_counter_next.sv` | 2-bit choice counter (11 −H→ 11, 11 −M→ 10, 10 −M→ 01, 01 −H→ 10, …) |
| `rtl/tournament_psc.sv` | top: Tournament predictor with probabilistic PHTs |

Top-level parameters (defaults): `PC_W` 64, `LHT_ENTRIES` 2048,
`LHIST_BITS` 11, `GHIST_BITS` 13, `CHOICE_BITS` 12, `PROB_W` 16,
`SEED_LOCAL` and `SEED_GLOBAL`. Ports:

* `clk`, `rst_n`
* `cfg_m`, `cfg_p` (17 bits each)
* `br_valid`, `br_pc`, `br_taken`
* `pred_taken`, `pred_global`, `init_busy`

## Verification

Every testbench checks itself and ends by printing
`TB_RESULT checks=N failures=F`.

* `tb_psc_update`: exhaustive. Covers 8 (m, p) settings, every state, both
  outcomes and all 65536 random numbers. It checks that exactly `thr`
  numbers cause a move, that those are the top `thr` numbers, and that
  every destination is right.
* `tb_psc_rng`: checks against a reference xorshift, the hold behaviour,
  and the mean and bucket uniformity.
* `tb_choice_counter_next`: exhaustive.
* `tb_psc_counter`: with m = 1, p = 0 the counter is checked cycle by
  cycle against the conventional counter. With m = 0 it must freeze. At
  m = p = ½ the single-step transition frequencies must come out as ¼, ¼
  and ½.
* `tb_tournament_psc`: the full-size predictor with default parameters.
  It runs 30000 branches of a synthetic 32-branch trace under (1, 0),
  (0.5, 0.5), (0.5, 0.1) and (0.8, 0.4). The testbench contains an
  independent model of the whole predictor, including both random
  sources, so every prediction and table selection is compared exactly.
  It counts the mechanisms (suppressed transition, strong-state reversal,
  weak-to-opposite-strong jump, choice training, global and local
  selection, clearing sweep) and requires each to occur. It also checks
  the sweep length and that (0.5, 0.5) mispredicts more than the
  conventional setting.
* `tb_attack_cutoff`: runs the prime/victim/probe attack 20000 times per
  victim direction and setting. The histogram of the count c is compared
  with a Markov-chain model, within 0.02. The run reproduces the published
  figures:
  * m = ½, p = 0: P(c=1 | taken) = 0 and P(c=2) = ¼ for both directions.
  * m = p = ½: the two distributions coincide, with P(c=1) = ⅛, and the
    success of the optimal guess is ½.

  The attacker primes until the counter is in ST. This is the starting
  point the analysis assumes; a real attacker can only make it likely.
* `tb_steady_state`: feeds an independent Bernoulli(s) branch to the
  counter at the eight published branch probabilities, under (1, 0),
  (0.5, 0.5) and (0.8, 0.4). The measured rate is compared with the closed
  form above (±0.008) and with the published theoretical values (±0.01).
* `tb_mergesort`: a top-down merge sort of 100000 integers, on uniform and
  on sorted data. Each of its four branches drives its own counter per
  setting. The taken fractions come out as published (0.939, 0.495, 0.355,
  0.437 and 0.891, 1, 0, 0.895). The misprediction rates agree with the
  published measured values within 0.01; in practice most agree to the
  third decimal.

  The loop branches are periodic rather than independent. For them the
  closed form is only approximate: the measured rates lie up to about
  0.06 from it, as the published measurements do.

To simulate with Verilator 5, from the directory holding `rtl/` and
`tb/`:

    verilator --binary --timing --assert -Irtl -y rtl rtl/psc_pkg.sv \
        tb/tb_tournament_psc.sv --top-module tb_tournament_psc -Mdir obj
    ./obj/Vtb_tournament_psc

Replace the testbench name for the others. `psc_pkg.sv` must be listed
first, and `-y rtl` finds the remaining modules. Each testbench runs in
seconds.

## Where this RTL departs from, or adds to, the published description

* **Published design:** the counter's state encoding, the deterministic
  transitions, the transition probabilities with m and p, and the
  parameter settings. The choice counter's transitions also follow the
  published state diagram.
* **Comparison with a threshold.** The description says both that the
  transition is carried out when the random number is bigger than the
  threshold, and that the threshold is m, while the transition probability
  it uses throughout is m. Here the random number is compared with 1 − m
  (or 1 − m·p, 1 − m + m·p), which satisfies both statements.
* **Own choices:** the random generator, the fixed-point width and the
  rounding of m·p.
* **The Tournament predictor** is known only by name and total size. Its
  table sizes, index functions, choice-training rule, non-speculative
  history and one-branch-per-cycle timing are conventional choices made
  here. The choice counters are not made probabilistic; the description
  applies the probabilistic update to prediction counters only.
* **Reset:** the initial counter state (WN), the reset values and the
  clearing sweep are this design's own. No initial state is specified.
* **Not included:** the processor the predictor was evaluated in: an
  8-wide out-of-order ARM core with BTB, TLBs and three cache levels. The
  predictor's ports are the interface such a core would drive. The
  instruction-throughput results on SPEC CPU 2017 therefore cannot be
  reproduced with this RTL. Only the misprediction behaviour of the
  counters can.
