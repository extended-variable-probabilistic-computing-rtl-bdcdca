# A probabilistic Ising machine with p-bits, p-ints and p-dits

A probabilistic Ising machine (PIM) solves an optimisation problem by
sampling. The problem is written as an energy over a set of variables. The
machine then repeats one step: pick a variable at random, look at the "field"
the other variables exert on it, and redraw its value from the Boltzmann
distribution at an inverse temperature β. Low-energy states come up most
often, and raising β over time (annealing) settles the machine into a good
solution.

A classic PIM can only hold binary variables (p-bits). Integers and category
labels must then be spread over groups of p-bits, with extra penalty terms to
keep the groups legal. This machine has 64 *multi-purpose p-elements*. Each
one can natively be:

* a **p-bit**: a ±1 spin;
* a **p-int**: a bounded integer that moves by at most one step per update;
* an **isotropic p-dit[3]**: a label from {0, 1, 2} where all labels are
  alike, as in graph colouring or set partitioning.

The kind is chosen once per problem and holds for all 64 elements. The
storage and the update logic are shared by all three kinds. They differ only
in how the three running totals of an element are read and in which sampling
rule the probabilistic logic unit (PLU) applies.

This RTL follows the block diagram and hardware description of the ASIC in
"Extended-variable probabilistic computing with p-dits". It fills in every
width, encoding and schedule detail the publication leaves open. Those
choices are marked as such below and in each file's opening comment.

## Energy model and what an element stores

Let element *i* have state m_i, bias h_i and couplings J_ij. The machine
samples from exp(−βE).

| kind | state | input total | update rule (probabilities) |
|---|---|---|---|
| p-bit | m ∈ {−1,+1} | I = h_i + Σ_j J_ij m_j | P(+1) = σ(2βI) |
| p-int | lo ≤ m ≤ hi | I = h_i + Σ_j J_ij m_j, sum includes j = i | see the PLU section: up, stay or down |
| p-dit[3] | m ∈ {0,1,2} | I^a = h_i^a + Σ_j J_ij (+1 if m_j = a, else −1) | P(a) ∝ exp(βI^a) |

Recomputing a total on every step would take 64 multiply-adds. Instead each
element keeps its totals *running*: when element j changes, every element
adds the change in J_ij·m_j to its own total. This is the central
mechanism of the design.

Each p-element (`p_element.sv`) holds:

* its row of J: 64 signed bytes, J[i][0..63];
* three 16-bit running totals acc[0..2];
* its state m (8-bit signed);
* lower and upper bounds lo and hi, used by p-ints.

The J row and the three totals make 64 + 3·2 = 70 bytes. This matches the
70 bytes per element quoted for the chip. Splitting them as 8-bit J and
16-bit totals is this design's reading of that figure. The state and bound
registers come on top.

### Why the totals are doubled

The p-int rule needs I + J_ii/2, which is a half-integer when J_ii is odd.
Every total is therefore stored as **2I**, and all arithmetic stays integer.

* **p-bit and p-int.** acc[0] holds 2I. When element j moves by k, every
  element adds 2·J[i][j]·k. For a p-bit flip, k = ±2, because m goes from
  −1 to +1 or back. For a p-int step, k = ±1.
* **p-dit.** acc[a] holds 2I^a. A move of element j from label c to label d
  turns J_ij's sign term for d from −1 to +1 and for c from +1 to −1. So
  acc[d] += 4·J[i][j] and acc[c] −= 4·J[i][j].

The mover updates its own total through the same rule, because J_ii sits in
its own row. A p-int's self-coupling therefore needs no special case.

For p-dits J_ii should be 0. An isotropic self-term only adds a constant, and
a nonzero J_ii would wrongly bias the element's own labels.

### What an element shows the multiplexer

Each element drives three 16-bit values i1..i3, plus its state and two bound
flags:

| kind | i1 | i2 | i3 | flags |
|---|---|---|---|---|
| p-bit / p-int | 2I + J_ii | 2I − J_ii | 2I | at_lo = (m ≤ lo), at_hi = (m ≥ hi), p-int only |
| p-dit | 2I^0 | 2I^1 | 2I^2 | 0 |

So the PLU gets every quantity it needs without any arithmetic of its own
beyond scaling by β: the terms I ± J_ii/2 (doubled) and I itself.

The totals wrap at 16 bits. A problem must keep |2I| < 2^15 for every state
it can visit, so the programmer has to scale it to fit.

## The probabilistic logic unit

The PLU (`plu.sv`) sees the totals of one element, the current β and a
10-bit random code q. q stands for r = (q + 0.5)/1024, uniform on (0, 1). The
chip's diagram names four tables in the PLU: e^−x, e^−2x, e^−x and 1/r − 1.
This design uses exactly those four. How they are combined is its own
derivation.

**Three-way choice from one random number.** Every outcome o gets a *score*
s_o, and its weight is exp(β·s_o/2). The scores come straight from the
element's three outputs:

| kind | outcome 0 | outcome 1 | outcome 2 |
|---|---|---|---|
| p-bit | +1: 2I | (none) | −1: −2I |
| p-int | up: 2I + J_ii | stay: 0 | down: −(2I − J_ii) |
| p-dit | label 0: 2I^0 | label 1: 2I^1 | label 2: 2I^2 |

A p-int at its lower bound cannot go down, and at its upper bound it cannot
go up. Such a blocked outcome gets weight 0.

The PLU takes as reference A the most likely outcome that is allowed, i.e.
the one with the largest score. B and C are the other two, in index order.
Their weights relative to A are:

* X = exp(−β(s_A − s_B)/2) ≤ 1;
* Y = exp(−β(s_A − s_C)/2) ≤ 1.

Sampling with one r in (0, 1) means:

* choose A if r < 1/(1+X+Y);
* choose C if r > (1+X)/(1+X+Y);
* choose B otherwise.

With u = 1/r − 1, read from the `rinv_lut` table, both tests become
divider-free:

    A  if  u > X + Y
    C  if  u·(1 + X) < Y
    B  otherwise

X and Y come from the two e^−x tables (`exp_lut`). The e^−2x table gives a
p-bit's single weight exp(−2β|I|), which doubles its range. The products
and the sum are 24-bit UQ12.12 values that saturate.

**Why the most likely outcome is the reference.** A fixed reference, such
as always "up" (outcome 0), fails. Consider a p-int pulled hard downwards.
Relative to "up", both "stay" and "down" then have weights far above e^8,
and both saturate the table. The choice between stay and down would then be
made at even odds, when down should win almost always. In the end-to-end
sampling test below, a fixed reference puts the sampled distribution of a
bounded two-p-int problem 0.31 away (total variation) from the correct
one. With the most likely outcome as reference, every weight is at most 1.
Saturation then only loses outcomes whose probability is below e^−8, and
the same test agrees to about 0.01.

**What the result looks like.**

* p-bit: the PLU returns k = new − old (−2, 0 or +2), so the other elements
  can apply 2·J·k.
* p-int: k ∈ {+1, 0, −1}. Away from the bounds this is the p-int update of
  the paper, a Boltzmann choice among m−1, m and m+1 with self-coupling. At a
  bound the choice is between staying and the one open step. The publication
  does not say what the chip does at a bound; this is this design's choice.
  Because the moves are ±1 steps with windows that shrink at the bounds, the
  chain's long-run distribution is close to, but not exactly, the Boltzmann
  distribution.
* p-dit: the result carries from, to and a moved flag.

**Quantisation.** Each argument β·d/2, with d a score difference, is formed
with 12 fraction bits. It is then rounded to 1/16 (`(p + 256) >>> 9`, see
`plu.sv`). Since A has the largest score, the argument is never negative. It
saturates just below 8. So no weight is below e^−8 (e^−16 for a p-bit, via
the e^−2x table), and outcome probabilities under about 1/3000 are not
resolved. The 10-bit r limits resolution to 1/1024.
`tb_plu` compares every outcome probability, over all 1024 random codes, with
the exact formula. It finds them within 0.03, including strongly biased
cases.

## One iteration: the two-clock schedule

The chip updates one element per two clocks. At 10 MHz that is 5 M updates/s.
This design keeps that rate with the following split:

    clock     S_SEL (cycle 1)                    S_UPD (cycle 2)
    -------   --------------------------------   -----------------------------------------------
    mux       sel = index register               (don't care)
    D reg     captures mux output at end         holds the selected element's totals
    PLU       -                                  decides from D reg, beta, r = rand[31:22]
    bus       idle                               {ST_RUN, index, PLU result} broadcast
    elements  -                                  all apply the update at the end of the clock
    other     -                                  index <= next random element; beta += step; iter++

The chip's description puts the decision in the first clock and the
broadcast in the second. Here the capture happens in the first clock, and the
decision and the broadcast both happen in the second. The PLU is a
combinational block after the D register.

The reason is a hazard. If the result were registered and broadcast one clock
later, the next element would be selected and captured in the same clock as
the previous broadcast. Its totals would then lack the last update.
Combining the PLU and the broadcast in one clock costs a long path (tables,
multiply, compare, fan-out to 64 elements). At 10 MHz in a 130 nm process
there is ample time for it.

The rest of the iteration works as follows:

* **Element choice.** Each iteration consumes one 32-bit random word.
  (rand[15:0] · n_elem) >> 16 picks an element among the n_elem in use, so
  unused elements are never picked. Bits 31:22 are the PLU's r. Bits 21:16
  are unused.
* **Random source.** `rand_ack` is high in each clock in which the word is
  used: the `start` clock and every S_UPD clock. The source must present a
  fresh word from the next clock on. On the chip the driver CPU supplies the
  random bits.
* **Run length.** A run of N iterations takes exactly 2N clocks. These are
  counted from the clock after `start` to the `done` pulse.
* **Annealing.** `beta_anneal` sets β to β0 at `start` and adds `bstep` once
  per iteration, saturating at `bmax`. `bstep` is UQ4.20, so very slow ramps
  are possible. The linear shape is this design's choice; the chip is only
  said to update the temperature once per iteration when annealing is used.

## Programming the machine

All setup goes through one write port, `cfg_valid` plus a `cfg_req_t`
`{op, index, field, data}`. Writes are accepted only while the machine is
idle; an assertion checks this. J and start-value writes are put on the same
broadcast bus that carries updates during a run. The bus carries a *stage*
(J write, start-value write, run update), an index and a value. The element
whose fixed ID equals the index takes it.

| op | field | effect |
|---|---|---|
| `OP_J` | column j | J[index][j] ← data[7:0] (signed) |
| `OP_IS` | `F_I1`,`F_I2`,`F_I3` | acc[0..2] of element index ← data (doubled total) |
| `OP_IS` | `F_M`, `F_LO`, `F_HI` | state, lower bound, upper bound ← data[7:0] (signed) |
| `OP_GLB` | `G_ELEM` (0) | element kind: 0 p-bit, 1 p-int, 2 p-dit |
| `OP_GLB` | `G_NELEM` (1) | number of elements in use, 1..64 |
| `OP_GLB` | `G_NITER_LO/HI` (2,3) | iterations per run (32 bits) |
| `OP_GLB` | `G_BETA0` (4) | starting β, UQ4.12 (4096 = 1.0) |
| `OP_GLB` | `G_BSTEP` (5) | β increment per iteration, UQ4.20 |
| `OP_GLB` | `G_BMAX` (6) | β ceiling, UQ4.12 |

The start totals are *written*, not computed on chip. For a start state
m(0), the driver computes and loads:

* p-bit / p-int: `F_I1` = 2h_i + 2·Σ_j J_ij m_j(0), the sum including j = i;
* p-dit: `F_I{a+1}` = 2h_i^a + 2·Σ_j J_ij·(m_j(0) = a ? +1 : −1).

The chip's diagram shows the same thing: a stage input carrying "I_s"
rather than h. A new run can start from the current state without any
reload. Totals always stay consistent with the state.

**Read-out.** While idle, the 64:1 multiplexer is steered by `rd_idx`, and
`rd_q` shows that element's totals, state and bound flags. The
multiplexer is combinational, so there is no latency.

**Problem scaling.** J is 8-bit signed, so any problem must be scaled into
−128..127. The testbenches show the limits this sets:

* 3-partition fits directly.
* The change-making ILP (pay 134¢ with coins of 3, 4, 7 and 11¢) has
  coupling −2C·s_i·s_j, which reaches −242 at C = 1. It therefore has to be
  halved. After halving, the smallest possible per-coin objective weight
  equals the constraint weight.

## Sizes and formats

| item | value | origin |
|---|---|---|
| p-elements | 64, all-to-all | published chip |
| p-dit dimensions | 3 | published chip |
| bytes per element | 70 (64 × 8-bit J, 3 × 16-bit total) | count published, split chosen here |
| state, bounds | 8-bit signed | chosen here |
| β | UQ4.12, 16 bits | chosen here |
| exp weights, 1/r − 1 | UQ12.12, 24 bits, saturating | chosen here |
| table argument | 8-bit signed, step 1/16 | chosen here |
| random code r | 10 bits | chosen here |
| random word per iteration | 32 bits | chosen here |
| iteration | 2 clocks | published chip |

## Files

| file | contents |
|---|---|
| `rtl/pim_pkg.sv` | sizes, enums, bus structs, setup register map |
| `rtl/p_element.sv` | one p-element: J row, running totals, state, bounds |
| `rtl/elem_mux.sv` | 64:1 multiplexer toward the PLU / read-out |
| `rtl/exp_lut.sv` | e^−x and e^−2x tables (filled at elaboration from `$exp`) |
| `rtl/rinv_lut.sv` | 1/r − 1 table |
| `rtl/plu.sv` | probabilistic logic unit |
| `rtl/beta_anneal.sv` | β register with linear ramp |
| `rtl/pim_ctrl.sv` | setup writes, stage multiplexer, two-clock schedule, element choice |
| `rtl/pim_top.sv` | the machine: 64 elements, mux, D register, PLU, annealer, controller |

The tables are computed at elaboration:

* e^−x: y = round(exp(−SCALE·x)·2^12), for x = code/16, saturating at
  2^24 − 1;
* 1/r − 1: u = round((1/r − 1)·2^12), for r = (q + 0.5)/1024.

## Verification

Each block has a self-checking testbench in `tb/`. Each one ends with a line
`TB_RESULT checks=N failures=M`.

| testbench | what it shows |
|---|---|
| `tb_exp_lut`, `tb_rinv_lut` | every table entry against `$exp` / the formula |
| `tb_elem_mux` | every select value |
| `tb_beta_anneal` | load, step, ceiling, constant β against a model |
| `tb_plu` | outcome probabilities over all 1024 random codes vs. the exact formulas, for all three kinds, bounds, self-coupling |
| `tb_p_element` | random setup writes (including ones addressed elsewhere) and 900 updates vs. a reference model, for all three kinds |
| `tb_pim_ctrl` | broadcast formats, the 2-clock cadence, element choice from the random word, `done`, read-out select |
| `tb_pim_top` | the whole machine at full size (below) |
| `tb_partition3` | 3-partition workload, p-dits vs. one-hot p-bits |
| `tb_change_making` | change-making ILP on four p-ints |
| `tb_sampling` | sampled distributions of the whole machine against exact ones, for all three kinds |

**`tb_pim_top`** runs the full 64-element machine with no parameter changes.
It loads and runs three problems through the setup port:

* a p-bit ring of 16 under an annealing ramp;
* the two-variable ILP x1 + 3x2 = 0 on p-ints with tight bounds;
* a 3-partition on 14 p-dits.

After each run, every total is read back and recomputed from J, h and the
read states. An exact match checks every broadcast update of the run. The
testbench also counts each mechanism on the bus and fails if one never
occurs:

* J and start-value writes;
* p-bit flips;
* p-int steps up and down;
* selections at a lower and at an upper bound;
* p-dit moves;
* rejected moves;
* annealing steps;
* reaching the β ceiling;
* `done`.

It also checks that N iterations take 2N clocks.

**`tb_sampling`** checks the statistics of the full machine. It runs small
problems for 200,000–300,000 iterations at constant β and histograms the
joint state once per iteration. Each histogram is compared with a
distribution computed in the testbench with real arithmetic:

| problem | compared with | total variation distance |
|---|---|---|
| 4 p-bits, random J and h, β = 1/8 | Boltzmann | 0.009 |
| 3 p-dits[3], random J and per-label h, β = 1/4 | Boltzmann | 0.005 |
| 2 bounded p-ints (x1 + 3x2 = 0 with a linear objective), β = 1/4 | stationary distribution of the ±1-step chain, found by power iteration | 0.013 (0.025 to Boltzmann) |

The pass limit is 0.03.

**Workload results** (full-size machine, same random seeds as the
testbenches):

* **3-partition** of 14 numbers in 1..6 (sum 59), 40 trials × 512
  iterations at β = 1/32:
  * isotropic p-dits: 40/40 trials end in a valid assignment, 7 at the
    optimum;
  * 42 one-hot p-bits at C = 94: 0/40 valid;
  * 42 one-hot p-bits at C = 127, the largest an 8-bit J holds: 0/40 valid.

  The p-bit couplings follow the published form h = −C(|D|−2), J = −C inside a
  group and ±2·n_i·n_j across groups. An ideal Gibbs sampler on the same
  numbers behaves the same way: for this set, whose sums are large, the
  one-hot groups need C of about 200 or more to stay mostly valid, which
  8-bit J cannot hold.
  The p-dit encoding needs no constraint term at all.
* **Change-making**, 60 trials each:
  * 300-iteration trials at constant β: exact change in 4;
  * 20,000-iteration annealed trials: exact change in 15, the fewest coins
    being 16.

  None used the optimal 14 coins. With the halved scale the coin-count
  weight cannot be made small relative to the constraint weight, and
  single-step moves must cross violations to trade coins. The testbench
  reports this; it does not check solution quality.

Each block was also run against a copy with one deliberate fault to make sure
its testbench catches it. Examples: a reversed PLU comparison, an off-by-one
iteration count, p-dit updates with the wrong sign, reversed element IDs.

### Running a testbench

With Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl \
        rtl/pim_pkg.sv tb/tb_pim_top.sv --top-module tb_pim_top -o sim
    ./obj_dir/sim

The full-size machine test finishes in well under a second. The workload
testbenches take a few seconds.

## How this departs from the published chip

* **Schedule.** The decision and the broadcast share the second clock; the
  chip computes in the first (see above).
* **Element kind.** It is global, not per element. The published diagram
  feeds one "element" signal to all elements and the PLU.
* **Bounds.** At a p-int bound, the move is reduced to a two-way choice.
  The publication does not describe bound handling in the chip.
* **Formats.** All widths other than 64 elements, 3 dimensions and 70 bytes
  are this design's. This includes table sizes, β format and random-code
  width.
* **Random bits.** They come in on a port, one 32-bit word per iteration.
  On the chip the driver CPU provides them. No on-chip generator is
  included.
* **Not included:**
  * the RISC-V driver CPU, its memory, the I/O harness and the clock source;
  * the FPGA p-int solver used for the quadratic-programming experiment;
  * the "scaled sampling" element selection evaluated in software for the
    fixed-charge problem, which this machine does not do because it picks
    elements uniformly;
  * objective tracking, which the publication also says the ASIC lacks.
* **Size limits.** 1,000-element and 6-label problems, such as the
  6-partition study, do not fit a 64-element, 3-label machine.
