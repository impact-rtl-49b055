# IMPACT: Y-Flash in-memory inference for the coalesced Tsetlin machine

IMPACT classifies a binary feature vector with a coalesced Tsetlin machine (CoTM) without
moving the model out of memory. The model is held in two crossbars of two-terminal Y-Flash
memristors, and the arithmetic comes from the arrays' physics:

- **Clause tile** (2048 literal rows x 500 clause columns). Each cell stores one Tsetlin
  automaton (TA) action as a conductance. A column's current tells whether its clause is
  violated, and a current-sense amplifier (CSA) at the column foot turns that current into
  the Boolean clause.
- **Class tile** (500 clause rows x 10 class columns). Each cell stores one clause weight
  as an analog conductance. Driving the rows of the clauses that are true makes each class
  column carry its weighted class sum as a current. The largest sum gives the class.

This repository gives that datapath as SystemVerilog, together with:

- the sequencing of the reading cycle;
- the write-verify flows that put a trained model into the arrays;
- the tiling that spreads larger models over several tiles.

The two arrays and the sense/convert circuits are analog. They are modelled behaviourally,
with integer conductances and currents, so that the whole design simulates in a
two-state simulator. The rest is synthesizable RTL.

## 1. The computation

The CoTM builds its literals from F binary features: each feature and its negation, giving
2F literals L_i. Each clause j has one TA per literal, and the TA's action is *include* or
*exclude*.

- A clause is the AND of its included literals: `C_j = AND_i (L_i OR NOT TA_ij)`.
- All classes share the clauses. Class m has a signed integer weight `W_jm` per clause and
  scores `V_m = sum_j W_jm * C_j`.
- The prediction is `argmax_m V_m`.

The hardware computes this without logic gates on the datapath:

| step | what carries the value |
|---|---|
| TA action | cell conductance: include = high state (HCS, > 2.4 uS; about 2.5 uS erased), exclude = low state (LCS, < 1 nS) |
| literal into the clause tile | a literal **0** drives its row at V_R = 2 V; a literal **1** leaves it floating |
| clause | column current `I_j = sum_i G_ij * V_R` over rows with literal 0; `C_j = 1` iff `I_j < 4.1 uA` |
| clause into the class tile | a clause **1** drives its row at V_R; a clause 0 floats it |
| weight | conductance `G = 1 nS + w' * (2.5 uS - 1 nS) / 419`, where `w' = W - W_min >= 0` |
| class sum | column current `I_m = sum_j C_j * G_jm * V_R`, digitised by an ADC |
| class | digital arg-max of the codes |

The clause tile works by exclusion. An included literal that is 0 puts a whole HCS cell
(4.8 to 5 uA) onto its column, which alone crosses the 4.1 uA threshold and reads as
clause 0. Excluded TAs add at most 2 nA each. The literal vector always has exactly half
its literals at 0, so in a 2048-row column at most 1024 LCS cells conduct: under 2.05 uA
in total, well below the threshold. That margin is why literal 1, not 0, is the floating
state. It is also why the row count of a tile is bounded.

Adding `|W_min|` to every weight makes the weights unipolar. Conductances cannot be
negative, and the shift does not change the arg-max, because every class gets the same
amount per true clause.

## 2. How the analog parts appear in RTL

All analog quantities are integers in a single package (`impact_pkg`):

- conductance `cond_t` in pS;
- current `current_t` in pA, 48 bits, which holds 500 rows x 5 uA with room to spare;
- `I = G * 2 V`, done by `cell_current()`;
- the thresholds: LCS < 1000 pS, HCS > 2.4e6 pS, erased 2.5e6 pS, CSA trip at 4.1e6 pA.

**`yflash_crossbar`** is the array model shared by both tiles:

- It holds `g[ROWS][COLS]`.
- Every clock that some row is driven, it registers each enabled column's current as the
  sum over driven rows of `2 * g`. This is Ohm's law at each crosspoint and Kirchhoff's
  law on the column.
- It has a verify port: the current of one addressed cell, used by the programming loops.
- It takes one programming pulse per clock (`pulse_cmd_t`: program or erase, and a width
  code of 1 ms, 500 us or 50 us).

The cell's response to a pulse is this model's own; published device data do not give a
usable law. Program removes 3/4, 1/2 or 1/8 of G for the three widths. Erase adds the same
fraction of the distance to a 2.6 uS saturation, and there is a 100 pS floor. With this law
an erased cell reaches LCS in six 1 ms pulses. The measured devices need about seven on
average.

Not modelled: device-to-device and cycle-to-cycle variation, read nonlinearity (measured
LCS cells conduct about 3 nA at 2 V rather than 2 nA), IR drop and sneak paths. The Y-Flash
cell is self-selecting, which is the published reason sneak paths are negligible.

**`csa`** models the latch-type sense amplifier as a comparator against a current
threshold. The column resistor and V_ref are folded into `TRIP_PA` = 4.1 uA. The decision is
taken at the rising edge of SE. While SE is high and Dis low it shows on `c` or `c_n`;
otherwise both are 0.

**`adc`** is an ideal quantiser: `code = min(floor(I / LSB), 2^BITS - 1)`, with 20 bits and
LSB = 2385 pA.

- One weight segment is 5964 pS, i.e. 11 928 pA at 2 V, so the LSB is one fifth of a
  segment.
- Full scale is 2^20 x 2385 pA, about 2.5 mA: 500 rows all at 2.5 uS.

The published design reads the class currents with an analog arg-max in the single-tile
case, and with ADCs when class sums are split over tiles. This design always digitises and
does the arg-max digitally, so one datapath serves both cases.

## 3. The reading cycle

The clock is 500 ps, this design's choice: it makes every published time a whole number of
cycles. `read_sequencer` produces one reading cycle:

| signal | cycles (500 ps each, numbered from 0) |
|---|---|
| reading pulse (rows at V_R) | 0 to 9 |
| SE (CSA sense enable) | 4 to 8 |
| sample (clause register / ADC) | 8 |
| Dis (CSA discharge) | 9 |

So the cycle is a 5 ns reading pulse, a 2 ns settling delay, a 2.5 ns SE pulse, and a
500 ps Dis at the end. The clause register of `clause_tile` and the ADCs of `class_tile`
load on `sample`, the last SE clock.

`impact_ctrl` runs one reading cycle per clause-column group, then one per class-column
group, then flags the sums valid. At the defaults every column has its own sense circuit,
so there is one group per tile.

End-to-end latency from an accepted request to `out_valid` is 24 clocks (12 ns):

- two reading cycles of 10 clocks plus one gap clock each;
- one clock to flag the class sums valid;
- one clock for the arg-max register.

In general the latency is `(CL_GROUPS + CS_GROUPS) * 11 + 2` clocks.

## 4. Putting a trained model into the arrays

Reset erases both arrays, so every TA initially reads as include and every weight as
maximal. Two valid/ready streams on the top then write the model, one cell at a time.
Only one stream may be active at a time; an assertion checks this.

### TA stream (`ta_*`)

Each transfer gives a global literal row, a global clause column and the trained TA state
(1 to 256). `ta_programmer` turns the state into an action:

- a state above 128 is include;
- a state of 128 or less is exclude.

It then runs a verify-then-pulse loop with 1 ms pulses:

- erase until the cell conducts more than 2.4 uS x 2 V (include);
- program until it conducts less than 1 nS x 2 V (exclude);
- give up after 31 pulses. The most pulses any published TA write needed was 17.

`ta_done` returns the action written, the pulses used and a fail flag.

### Weight stream (`w_*`)

Send each signed weight twice:

1. **Scan pass** (`w_scan = 1`, after a `w_clear`). `weight_offset` tracks the minimum,
   W_min.
2. **Write pass** (`w_scan = 0`). Each weight is shifted to `w' = W - W_min`, and
   `weight_tuner` writes it into its class cell in two stages:
   - **Pre-tune:** 500 us program or erase pulses until the cell lies within +-20 segments
     of its target, at most 10 pulses.
   - **Fine-tune:** 50 us pulses until it lies within +-5 segments, at most 6 pulses.

   Every pulse is preceded by a verify read, and the pulse direction follows the sign of
   the error. `w_done` reports the pulses used by each stage and whether the cell ended
   outside the +-5 window (a "miss"). The published flow counts such misses as its mapping
   cost.

The conductance range 1 nS to 2.5 uS is split into 419 segments, the published WMAX. With
12-bit signed weights, `W - W_min` must not exceed 419; clip the trained weights first.

## 5. Larger models: tiling

A model that exceeds one tile is spread over X x J clause tiles and J class tiles
(parameters `X`, `J` of `impact_top`):

- **More literals than K.** X clause tiles hold disjoint literal subsets of the same
  clauses. Each produces a partial clause, and `partial_clause_and` ANDs them. A clause is
  true only if it is true on every subset, so this is exact.
- **More clauses than N.** J clause groups each feed their own class tile. The J vectors
  of digitised class sums are added (`partial_class_sum`) before the arg-max.

With tiling, feature i is literal i and its negation is literal `F + i`, where
`F = X * K / 2`. Literal tile x takes literals `x*K .. x*K + K - 1`. Global TA addresses are
split with `/ K`, `% K`, `/ N` and `% N`.

All tiles read in parallel, so tiling does not change the latency. The published
architecture also allows mapping tiles onto fewer physical arrays over time; that temporal
reuse is not built here.

## 6. Module map

```
impact_top
 |- weight_offset                     bipolar -> unipolar weights (scan for W_min)
 |- ta_programmer                     TA state -> include/exclude, 1 ms write-verify
 |- weight_tuner                      pre-tune / fine-tune write-verify
 |- impact_ctrl                       inference sequencing
 |   `- read_sequencer                reading pulse, SE, Dis, sample
 |- clause_tile   [X x J]             2048 x 500 by default
 |   |- row_mux        (literal 0 -> V_R)
 |   |- column_decoder (column groups to CSAs)
 |   |- yflash_crossbar                behavioural array
 |   `- csa  [N]                       behavioural sense amplifier
 |- partial_clause_and [J]
 |- class_tile    [J]                 500 x 10 by default
 |   |- row_mux        (clause 1 -> V_R)
 |   |- column_decoder
 |   |- yflash_crossbar
 |   `- adc  [M]                       behavioural converter
 |- partial_class_sum
 `- argmax
```

`impact_pkg` holds the shared constants, the current and conductance types, and the
pulse command struct. Each file begins with a description of its timing and interface.

## 7. Where this design departs from the published description

- **Class-tile row drive.** One of the published class-tile figures labels the row MUX as
  for the clause tile (1 -> floating). The text says a clause 1 is driven at V_R, and only
  that makes true clauses vote, so the text is followed.
- **Dis pulse width.** The CSA waveform figure prints 2 ns for Dis. The text puts Dis in
  the last 500 ps of the 5 ns reading pulse, which is also the only placement that fits
  after a 2 ns delay and a 2.5 ns SE pulse. 500 ps is used.
- **Combining class tiles.** The scaling figure writes the combination of class tiles as an
  AND. The text says the digitised outputs are combined into the class sum, so they are
  added.
- **Weight offset.** The tuning flow figure says the "-MAX weight" is added. The text adds
  the magnitude of the most negative weight, and that is what is built.
- **Number of weight segments.** The published flow divides the conductance range into as
  many segments as the largest unipolar weight of the trained model. Here that number is
  the parameter `WMAX` (419, the value for the published MNIST model) and must be set per
  model. It is not derived from the scanned weights at run time.
- **This design's own choices:**
  - the clock;
  - the ADC resolution;
  - the always-digital arg-max, with ties going to the lowest class index;
  - the stream interfaces and their widths;
  - the pulse budget of the TA writer;
  - the cell response law;
  - the clause register;
  - the column grouping option (`CL_GROUP`, `CS_GROUP`, defaulting to all columns at once).
- **Not reproduced:** energy, area and throughput figures (pJ per inference, mm^2, GOPS).
  These come from circuit simulation and measurement and have no RTL counterpart.

## 8. How far it can be trusted

- The digital parts are exercised against independent models in their testbenches: the
  sequencer, decoders, programmers, tuner, offset, tiling logic, arg-max and controller.
- The analog parts behave like the published description at the level of Boolean and
  integer results. They do not model voltages, variation or noise, so the design says
  nothing about analog margins beyond the arithmetic in section 1.
- In particular, tuning results (pulse counts, miss rate) follow from the model's
  geometric pulse law and will differ from real Y-Flash cells.
- The crossbar model keeps every cell in a simulator array. Synthesis tools can elaborate
  it, but a 1M-cell array of 48-bit values is not something to synthesise. In a real chip
  `yflash_crossbar`, `csa` and `adc` are the analog macros, and everything around them is
  the digital periphery.

## 9. Simulating

Every testbench is self-checking and prints `TB_RESULT checks=<n> failures=<n>`. For example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    --top-module tb_impact_top rtl/impact_pkg.sv tb/tb_impact_top.sv -o sim
./obj_dir/sim
```

Each block has its own testbench, `tb/tb_<module>.sv`. The two system-level ones are:

- **`tb_impact_top`** is a small tiled instance: 16-literal x 8-clause clause tiles,
  X = J = 2, 4 classes, columns read in groups, so the latency is 4 x 11 + 2 clocks.
  - It programs a random model through both streams and checks 40 inferences against a
    bench model: clauses, class sums computed from the conductances actually left in the
    class cells, class and latency.
  - It requires the class to agree with the signed software CoTM on at least 3/4 of
    the inputs.
  - It counts every mechanism and fails if one never occurs: include and exclude writes,
    pre-tune program and erase, fine-tune, a tuning miss, clause 0 and 1, a clause decided
    only by the AND across literal tiles, and a non-zero sum from the second class tile.
- **`tb_impact_full`** runs the top with no parameter overrides.
  - It loads a model shaped like the published MNIST one (784 features, so 1568
    literals, 500 clauses, 10 classes). It writes all 1 024 000 TAs of the 2048 x 500
    clause tile, unused rows included, and all 5 000 weights.
  - It then classifies several feature vectors, with the same checks.
  - It takes about three minutes.

Simulator notes:

- The testbenches read internal arrays by hierarchical name (`dut.gen_cs[j].u_tile.u_xbar.g`),
  to know what the tuning actually left in the class cells.
- Verilator is two-state, so every register that is read is reset.

## 10. Published workloads at the default size

The default top (X = J = 1) has 2048 literal rows, 500 clauses and 10 classes.

| dataset | literals | clauses | classes | fits X = J = 1? |
|---|---|---|---|---|
| MNIST (main evaluation) | 1568 | 500 | 10 | yes |
| Fashion-MNIST | 1568 | 500 | 10 | yes |
| Iris | 32 | 12 | 3 | yes |
| KWS-6 | 754 | 300 | 6 | yes |
| EMG | 192 | 300 | 7 | yes |
| Gesture Phase | 424 | 300 | 5 | yes |
| CIFAR-2 | 2048 | 1000 | 2 | no: needs J = 2 |
| Human Activity | 1632 | 800 | 6 | no: needs J = 2 |

A smaller model uses the first features. Feature i goes on row i and its negation on row
`1024 + i`. The other TAs of a used clause are written as exclude, so those rows never
affect it. Unused clause columns are left erased (all include); since they include a
feature and its negation, they always read 0 and add nothing to the class sums. Unused
class columns can be ignored.
