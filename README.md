# On-line compensation of a failed cavity: polynomial lattice model and genetic search in logic

A superconducting proton linac for an accelerator-driven system must almost
never lose its beam. When one accelerating cavity fails, the beam arrives
downstream with too little energy and mismatched Twiss parameters; the usual
cure is to re-tune the neighbouring cavities and solenoids with settings
looked up in a database precomputed by a beam-dynamics code. This design
computes those settings on line instead. It carries an *equivalent model* of
the lattice, in which every lattice period is a low-order polynomial of the
incoming beam state and of the period's settings, and a *genetic algorithm*
that searches the settings of the periods around the failure until the beam
at a matching point downstream looks like the nominal beam again. Both are
plain fixed-point logic: multiplications, additions, comparisons and one
square root, no division.

The reference machine is Injector I of the C-ADS linac: 14 periods, each a
superconducting cavity with a solenoid, accelerating protons to 10 MeV. The
default parameters are sized for it.

## 1. What happens when a cavity fails

```
        cfg writes ──► nominal_settings ──────────────┐ nominal settings, targets, bounds, limits
                                                       │
 fail_valid/fail_idx ─► zone & matching point          ▼
                         │                ┌────── chrom_decode ◄──── ga_engine ◄─────────┐
                         │                │  (genes into zone, failed    │ (population,     │
                         ▼                ▼   cavity field = 0)          │  roulette,       │
                     lattice_model: 14 poly_element stages ──tap at M──► fitness_eval ──────┘
                         ▲  (per-element settings through delay_line)        objective
                         │
 mon_req ────────────────┘ ──► mon_state (beam after every period)
                                   cav_set ◄── chrom_decode(best) or nominal ──► per-cavity controllers
```

1. In normal operation `cav_set`, the phase, field and solenoid value of every
   period, equals the nominal settings held in `nominal_settings`.
2. A failure report (`fail_valid`, `fail_idx`) fixes the *compensation zone*,
   the five periods `fail_idx-2 .. fail_idx+2` (shifted to stay inside the
   lattice), and the *matching point* M after the last period of the zone. For
   a failure of cavity 11 (index 10) the zone is periods 9..13 and M is after
   period 13, the case studied for Injector I. `mode` goes to 1 (optimising).
3. The genetic-algorithm engine searches the 15 settings of the zone (phase,
   cavity field, solenoid for each of the five periods). Every candidate is
   decoded into a full lattice setting, nominal outside the zone and with the
   failed cavity at zero field. It then passes through the lattice model, and
   the beam state at M is scored against the nominal state at M.
4. When the search stops, on a fitness target or after a generation limit,
   `mode` becomes 2 (compensated) and `cav_set` carries the best settings found.
   `restore` returns to nominal settings (mode 0).
5. At any time outside a search, `mon_req` runs one model pass on the settings
   being driven and reports the predicted beam state after every period
   (`mon_state`, `mon_valid`, with `mon_viol` if an envelope limit is
   exceeded). This is how the model is checked against a beam-dynamics code.

## 2. The equivalent lattice model

### Numbers and the beam state

Every quantity is an 18-bit two's-complement fixed-point number with 12
fraction bits (Q6.12: range -32 .. +32, step 1/4096). The beam state is ten
such numbers: kinetic energy (MeV) and alpha, beta, gamma of the Twiss
parameters in x, y and z. Positions in the packed `state_t` vector are given
by `S_E, S_AX, S_BX, S_GX, ..., S_GZ` in `cr_pkg`. A setting is
`{phi, v, b}`: synchronous phase, accelerating field and solenoid field, in
whatever units the model weights were fitted for.

### One period: `poly_element`

Each period maps the beam state at its entrance and its own setting to the
beam state at its exit. Every output variable is a weighted sum of basis
functions,

    y_k = sum_{j=0..15} W[k][j] * phi_j,        phi_j = v[a_j] * v[b_j],

where `v` is the 14-entry input vector `{1.0, state[0..9], phi, v, b}`
(`V_ONE`, `1+S_*`, `V_PHI`, `V_V`, `V_B`). The pair `(a_j, b_j)` selects which
two inputs form term j: `(0,0)` is the constant term, `(i,0)` the linear term
in input i, and any other pair a quadratic term. So each period holds an
arbitrary polynomial of degree two with up to 16 terms per output, with terms
shared by the ten outputs. The weights are what a fit to a beam-dynamics code
produces. They include the effect of linear space charge and the
"drift + gap/solenoid + drift" replacement of cavity and solenoid fields,
which the model does not compute separately. Weights and term selects live in
registers inside each element and are written through the configuration
port. A different lattice or beam current means new weights, not new logic.

Arithmetic: a product of two Q6.12 numbers is rescaled by 12 bits and
saturated to 18 bits to form `phi_j`. The ten weighted sums are kept at full
width (40 bits) and rescaled and saturated only once at the end.

Pipeline (`ELEM_LAT` = 4 cycles, one new beam state every clock):

| cycle | work |
|---|---|
| 1 | 16 basis products |
| 2 | 160 weighted terms |
| 3 | 40 partial sums of four terms |
| 4 | 10 final sums, rescale, saturate; envelope test |

### The whole lattice: `lattice_model`

Fourteen elements are chained, the exit of one feeding the entrance of the
next. A lattice evaluation is started with `in_valid`, a tag, the entrance
beam state and the settings of all 14 periods at once. The settings of period k
pass through a `delay_line` of `4k` cycles, so they reach element k in the
same cycle as the beam state of their own evaluation. Because of this a new
candidate lattice can enter on every clock, and once the pipe is full one
complete lattice result leaves per clock. The state after period k (tap k)
appears `4(k+1)` cycles after the start, with the tag and a sticky violation
flag. The exit of the 14th period appears after 56 cycles, 280 ns at 200 MHz.

### Envelope limit: `envelope_check`

The search must not accept settings that blow up the beam anywhere. The beam
size is sqrt(beta * emittance); emittance is not part of the model state, so
the limit is put on the beta functions: a state with beta_x > bmax_x,
beta_y > bmax_y or beta_z > bmax_z is flagged. Every element tests its own
output and ORs the result into the flag it passes on, so a tap's flag means
"limit exceeded here or earlier".

## 3. The objective: `fitness_eval`

At the matching point the engine compares seven quantities with their nominal
values: energy, and alpha and beta in x, y and z. The score is the square root
of the quadratic sum of the relative errors,

    F = sqrt( sum_k ((y_k - n_k) / n_k)^2 ).

The division is avoided: the settings store keeps `1/n_k` for every period,
written by the host, and the relative error is `(y_k - n_k) * (1/n_k)`,
saturated to Q6.12. Squares (Q.24) are summed into a 40-bit word whose integer
square root (`isqrt_pipe`, one result bit per stage) is F in unsigned Q8.12,
20 bits. A candidate that broke an envelope limit gets the worst value,
all ones. Latency is 4 + 20 = 24 cycles at one result per clock.

## 4. The search: `ga_engine`

**Chromosome.** 15 genes of 18 bits: for zone position p = 0..4, gene 3p is
the phase, 3p+1 the cavity field, 3p+2 the solenoid field. Genes are the
setting values themselves; every gene has a lower and an upper bound, the
range in which the fitted model is trusted.

**Loop.** The engine holds a population of 32 chromosomes and their scores.

1. *Initialisation:* 32 chromosomes are drawn uniformly within the bounds
   and issued to the model, one per clock.
2. *Evaluation:* scores come back by slot number; when all 32 are in, the
   best of the generation is compared with the best so far (kept in
   `best_chrom`/`best_fit`).
3. *Termination:* stop when the best score is at or below the fitness target,
   or when the generation limit is reached (`hit_target` tells which).
4. *Next generation:* slot 0 gets the best chromosome so far (elitism). The
   other 31 slots are filled in pairs: two parents are chosen by
   roulette wheel, cut at one random gene boundary and crossed, and
   each child is mutated. Children are issued to the model as they are built,
   one per clock, and the loop goes back to step 2.

**Roulette wheel (`roulette_select`).** Each individual's share of the wheel
is `FIT_MAX - F`, so better (lower) scores get more area and limit violators
(F = FIT_MAX) get none. That is how the envelope constraint removes the worst
solutions. The running sums are registered once per generation. A random
word picks the point `(r * total) >> 32` and the chosen slot is the number of
running sums not above that point. Two wheels with independent random words
run side by side.

**Crossover (`crossover`).** Single cut point in 1..14, drawn per pair; genes
before the cut are swapped between the two parents.

**Mutation (`mutation`).** Each gene, with probability `mut_thresh/256`, is
replaced by a uniform value in its bounds,
`lo + ((r[31:14] * (hi - lo)) >> 18)`. The same unit, forced on for every
gene, draws the initial population.

**Random numbers (`lfsr_rng`).** 33 independent 32-bit xorshift generators
(shifts 13, 17, 5), stepping every clock: 15 words per child for mutation,
two for the wheels and one for the cut point.

**Timing.** One generation takes 32 issue cycles, then the model and
objective latency at the matching point (`4*(M+1) + 24` cycles), then one
ranking cycle. For Injector I with M after period 13 that is about 111 cycles
per generation, roughly 0.55 us at 200 MHz; 30 generations take about 3,300
cycles.

## 5. Configuration register map

`cfg` is a packed `cfg_wr_t` `{en, region[3:0], elem[4:0], idx[7:0], data[17:0]}`;
one register is written per clock while `en` is high. Everything resets to
zero except the beta limits (largest positive value), `max_gen` (100) and
`mut_thresh` (8).

| region | name | elem | idx | data |
|---|---|---|---|---|
| 0 | `R_WEIGHT` | period | `{k[3:0], j[3:0]}` | weight W[k][j], Q6.12 |
| 1 | `R_BASIS` | period | j | `{b_j[3:0], a_j[3:0]}` in bits 7:0 |
| 2 | `R_NOM_SET` | period | 0 phi, 1 v, 2 b | nominal setting |
| 3 | `R_NOM_STATE` | period | state position | nominal beam state after the period |
| 4 | `R_INV` | period | 0 E, 1 alpha_x, 2 beta_x, 3 alpha_y, 4 beta_y, 5 alpha_z, 6 beta_z | 1 / nominal value |
| 5 | `R_ENTRANCE` | - | state position | beam at the lattice entrance |
| 6 / 7 | `R_GENE_LO` / `R_GENE_HI` | zone position 0..4 | 0 phi, 1 v, 2 b | gene bounds |
| 8 | `R_MISC` | - | 0..2 beta limit x/y/z, 3 fitness target, 4 generation limit, 5 mutation threshold | value |

## 6. Top-level interface (`comp_rematch_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `cfg` | in | `cfg_wr_t` | register write (section 5) |
| `fail_valid`, `fail_idx` | in | 1, 5 | failure of period `fail_idx` (0-based); ignored during a search |
| `restore` | in | 1 | go back to nominal settings (not during a search) |
| `mon_req` | in | 1 | one model pass on the driven settings (held until served) |
| `cav_set` | out | 14 x `setting_t` | settings for the per-cavity controllers |
| `mode` | out | 2 | 0 normal, 1 optimising, 2 compensated |
| `ga_done`, `hit_target` | out | 1, 1 | search finished; finished by reaching the target |
| `best_fit`, `gen_count` | out | 20, 16 | best objective so far, generations run |
| `ev_mutate`, `ev_improve` | out | 1, 1 | pulse: a child pair was mutated; the best improved |
| `mon_valid`, `mon_viol`, `mon_state` | out | 1, 1, 14 x `state_t` | monitor result, about 58 cycles after `mon_req` |

The per-cavity controllers that sit between `cav_set` and each cavity's RF
system and solenoid supply are outside this design. They also supply the
failure report.

## 7. Where this departs from the published method

The published work gives the model equation, the algorithm's flow and
operators, the zone and matching point of its example, the 14-period lattice,
18-bit buses and the measured model timing. Everything below is this design's
own choice:

- **Basis functions.** The source allows any basis; here it is products of two
  inputs (degree two), 16 terms per period. No fitted weights are published,
  so none are built in.
- **One model for all ten variables.** The source reports 270 ns for the
  longitudinal Twiss and energy and 695 ns for the transverse Twiss at
  200 MHz, which suggests separate pipelines. Here all ten variables are
  computed together in 56 cycles (280 ns at 200 MHz), and each period sees the
  full state, which keeps the space-charge coupling between planes.
- **No beam phase in the objective.** The source compares energy, phase and
  Twiss at the matching point; the model state here (like the published bus
  list) has no phase, so it is not scored.
- **Reciprocals instead of division** in the relative errors; **beta limits**
  stand in for envelope limits.
- **Population 32, elitism in slot 0, score `FIT_MAX - F`, crossover on every
  pair, bounded uniform mutation, xorshift random numbers**: the source does
  not give these.
- **Zone rule** `fail-2 .. fail+2` generalises the one published case
  (failure 11, zone 9..13).
- **Modes, `restore` and the monitor pass** are this design's way of
  switching between nominal and compensated settings and of reading the
  model's prediction. The handshake names of the original timing capture
  (`ce`, `ask`, `rqt`) are not documented and are not reproduced.

## 8. Files

`rtl/` (one unit per file):

| file | content |
|---|---|
| `cr_pkg.sv` | widths, counts, state positions, `setting_t`, `state_t`, `chrom_t`, `cfg_wr_t`, saturation |
| `poly_element.sv` | one period of the model, with `envelope_check.sv` |
| `lattice_model.sv` | 14 chained elements, settings `delay_line.sv` |
| `nominal_settings.sv` | register store of section 5 |
| `fitness_eval.sv`, `isqrt_pipe.sv` | objective and its square root |
| `ga_engine.sv` | search controller, with `lfsr_rng.sv`, `roulette_select.sv`, `crossover.sv`, `mutation.sv` |
| `chrom_decode.sv` | chromosome to lattice settings |
| `comp_rematch_top.sv` | the whole processor |

`tb/` holds one self-checking testbench per unit, `tb_<module>.sv`, and
`cr_ref_pkg.sv`: an integer model of the arithmetic (element polynomial,
objective, square root) used as the reference. Each testbench prints
`TB_RESULT checks=N failures=M` and stops itself after a fixed time.

`tb_comp_rematch_top.sv` runs the whole design at its default size. It loads
a small synthetic beam model in polynomial form: energy gain V - phi^2/2 per
period, solenoid focusing of beta_x and beta_y, field and phase acting on the
longitudinal Twiss parameters. With it the 14 periods take the beam from 3 to
10 MeV. The test checks the monitor prediction of every period against the
reference, then fails cavity 11 and lets the search run 30 generations. The
compensated settings must beat doing nothing, be driven out with the failed
cavity at zero and the rest nominal, and reproduce the reported best score.
Then it restores nominal operation and repeats with a reachable target, and
finally checks the zone placement for failures at both ends of the lattice
and that a second report during a search is ignored. In
one typical run the objective at M fell from 0.35 (cavity 11 simply off) to
0.11. The test fails if any mechanism (mutation, improvement, envelope
rejection, both stop conditions, monitor, restore) never occurs. The
synthetic model is only a test load, not a description of Injector I.

Simulation with Verilator 5, from the folder holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_comp_rematch_top \
    -y rtl -y tb rtl/cr_pkg.sv tb/cr_ref_pkg.sv tb/tb_comp_rematch_top.sv
./obj_dir/Vtb_comp_rematch_top
```

`-y` lets Verilator find every other module in the file of the same name; the
two packages must be named first. Use any other `tb_<module>` in place of
`tb_comp_rematch_top` to test one unit. `-Wno-fatal` keeps the lint warnings
of the testbenches' integer arithmetic from stopping the build. The
end-to-end test builds in about a minute and runs in a few seconds.

## 9. Size and limits

- Per period: 176 multipliers of 18 x 18 bits (16 basis products and 160
  weighted terms) and 2,880 weight bits. For 14 periods that is about 2,460
  multipliers, several times what a mid-range FPGA has. A smaller device would
  share multipliers over several cycles per period at the cost of throughput;
  this design keeps one lattice evaluation per clock.
- Saturation: any intermediate value outside ±32 clips. Weights and units
  must be scaled so the beam state stays inside that range (energies up to
  10 MeV, Twiss values of a few metres fit comfortably).
- A failure report during a search is ignored; report it again after the
  search ends.
- The accuracy of the result is the accuracy of the fitted polynomials. The
  published comparison with a tracking code shows relative errors of a few
  percent over a five-period zone, growing with beam current.
