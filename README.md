# CADS: a learning request scheduler for a shared DRAM controller

When many cores share one DRAM controller, a fixed policy like FR-FCFS (serve
row hits first, then the oldest request) favours cores with good row locality
and starves the rest. CADS (Core-Aware Dynamic Scheduler) keeps FR-FCFS as its
baseline, but on every decision it first picks one **core** whose requests get
priority. To pick that core it learns online, by reinforcement learning:

* every core has a small **linear model** that predicts the long-term reward of
  favouring that core, from four counters that describe the current state;
* the controller favours the core with the highest prediction, except that with
  a small probability epsilon it takes the FR-FCFS choice instead, so that it
  keeps exploring;
* a **reward** computed from how evenly the cores are starved (the stall time
  per waiting request) judges each decision, and a **Q-learning** update
  corrects the model of the core that was favoured.

This RTL implements the scheduler: the request buffer, the state counters, both
learning circuits and the arbiter. It follows the published description of CADS
(Olmedo Sanchez and Sun). The DRAM command generator and the DRAM timing are
not part of it. They connect through two signals: `bank_ready` in, which says
which banks can take a request now, and the issued request out.

## Structure

```
 petitions ──► request_buffer ──► request_arbiter ──► issued petition (1 per DRAM cycle)
   (from cores)   │  64 entries        ▲   │ core_ready, FR-FCFS core        ▲ bank_ready
                  ▼                    │   ▼
           feature_counters        next_core_select  (level 1)
           NumPet RowHitPet  ──────►  core_model_mac: Σ θ_i·f_i, one core per clock
           BPPet  HistPet             MAX over ready cores, epsilon choice
                  │                    │ Selected Core, Reward Selected Core, Core Max Reward
                  ▼                    ▼
           reward_calculator ──► qlearn_update ──► theta_regfile ──┐
           (level 2) stall counters,     θ += α·δ·f                 │
           mrs_divider, reward_rules                                └──► back to level 1
```

`cads_top` wires these together. `cads_config_regs` holds alpha, gamma,
epsilon, the starvation thresholds and the rule rewards. `cads_pkg` holds the
shared types and the fixed-point helpers.

## State: the four features

For core *k* the model sees four features (the order of equation (1) of the
published description):

| index | name | scope | meaning | kept by |
|---|---|---|---|---|
| f0 | NumPet | per core | petitions of *k* waiting in the buffer | up/down counter |
| f1 | RowHitPet | per core | waiting petitions of *k* to the bank and row that *k* accessed last | registered count over the buffer, compared with a last-row register per core |
| f2 | BPPet | global | banks that have at least one waiting petition | occupancy counter per bank, plus a counter of non-empty banks |
| f3 | HistPet | per core | petitions of *k* among the last 100 issued | 100-deep shift register of core ids, plus an up/down counter per core |

RowHitPet is the only feature that is not a pure up/down counter. Its reference
row changes whenever core *k* is served, so it is recounted from the buffer
every clock. All features show the buffer state one clock late.

## Level 1: choosing the core (`next_core_select`)

A decision starts with a `start` pulse. Stage 1 (`core_model_mac`) has four
16-bit multipliers and an adder tree, and evaluates one core model per clock:

    reward_k = θ0·NumPet + θ1·RowHitPet + θ2·BPPet + θ3·HistPet

Stage 2 (MAX) keeps the highest prediction among cores with at least one ready
request. On a tie the lower core index wins. A final clock makes the epsilon
choice: a 16-bit LFSR value below `epsilon` selects the core of the FR-FCFS
choice, otherwise the core with the maximum prediction is selected.

Latency is NCORES + 2 clocks: one to fill the pipeline, one per core, and one
for the choice. For four cores that is the six clocks of the published
description. For 16 cores it is 18 clocks, which is two DRAM cycles at the
9:1 CPU-to-DRAM clock ratio. The published text says both "a new core every
DRAM cycle" and "one model per clock with four multipliers", which cannot both
hold with 16 cores. This RTL keeps the four-multiplier structure by default.
The `LANES` parameter widens stage 1 to several models per clock, and the
latency becomes NCORES/LANES + 2. For example, `LANES = 2` brings 16 cores down
to 10 clocks. The MAX stage compares the lanes of one clock in core order, so
the result does not depend on `LANES`.

## Level 2: reward and learning

**Stall time and starvation (`reward_calculator`, `mrs_divider`).** Each core
has a 16-bit saturating counter:

* it counts DRAM cycles while the core has a petition waiting;
* it clears as soon as the core has none left.

On `start`, one divider computes, one core per clock:

    MRStarvation_k = StallTime_k / NumPet_k

The result is unsigned Q8.8, and 0 when NumPet is 0. A core with few requests
that waits long gets a high value, which is intended: stall cycles hurt a
compute-bound core more.

**Rules (`reward_rules`).** Each active core's starvation is put into one of
four classes with the thresholds K0..K3 (class = largest *i* with
MRStarvation ≥ K_i). The published description fixes that there are 16 rules
with 16 reward values built from these classes, but it does not list them. This
design indexes them by the pair (highest class, lowest class) over the cores
that have waiting petitions:

    reward = rule_reward[4·max_class + min_class]

That gives exactly 16 rules for any number of cores. The reset table pays 1.0
when all active cores are in one class, then 0.5, 0.25 and 0 as the spread
grows. This follows the stated intent that a fair schedule earns a positive
reward and an unfair one earns nothing. One pass takes NCORES + 3 clocks (seven
for four cores, as published). The reward of a decision is computed from the
starvation at its start, so it judges the previous reordering.

**Update (`qlearn_update`).** Once level 1 and the reward are both done, the
model of the core selected by the **previous** decision is updated with that
decision's features f_i:

    δ      = CurrentReward + γ · CoreMaxReward(now) − RewardSelectedCore(previous)
    θ_i   += α · δ · f_i            for i = 0..3

The unit has one multiplier and one adder, and one update takes nine clocks. It
is off the critical path. The arbiter already uses the new selection while the
update runs, and in `cads_top` the next decision can start at the same time.
The update latches everything it needs when it starts. Two
deliberate departures from the printed equations:

* The printed update multiplies δ by θ_i, not by f_i. All θ start at zero, so
  that form could never move them. The usual gradient form with f_i is used.
* The printed algorithm stores the *maximum* reward as the previous reward,
  while the hardware figure feeds *Reward Selected Core* into the update. The
  figure is followed, so an exploratory choice is judged by its own prediction.

A decision with no ready core makes no update.

## Issuing: the arbiter (`request_arbiter`)

A petition is *ready* if `bank_ready[bank]` is high, and a *row hit* if its row
is the open row of its bank. The arbiter keeps its own open-row table (open-page
policy: the row of the last petition sent to a bank stays open). With selected
core S, the arbiter issues the oldest ready petition in this order:

1. a row hit of S;
2. a row hit of any core;
3. any petition of S;
4. any petition.

Rules 1 and 2 are as published. Rules 3 and 4 complete the FR-FCFS baseline.
With no valid selection the order is plain FR-FCFS (2, then 4). Because the
buffer is a collapsing queue with entry 0 the oldest, "oldest" is a priority
encoder from index 0.

## Timing of `cads_top`

* `dram_tick` is high for one CPU clock in every `CLK_RATIO` (9). At most one
  petition is issued per tick (`iss_valid`). The same tick steps the stall
  counters.
* A decision (level 1 and the reward pass together) starts on a tick once
  both are idle and the previous decision has been handed to the Q-learning
  unit. The update overlaps the next decision. With 16 cores and one lane, a
  decision starts every third DRAM cycle: the reward pass takes 19 clocks
  against 9 per tick. The arbiter uses the most recent Selected Core from the
  clock level 1 finishes.
* `req_valid`/`req` is a one-petition-per-clock input. `req_accept` says the
  petition was taken. While `req_full` is high the petition is refused and the
  sender must present it again. Refused petitions are what the published
  evaluation counts as extra memory traffic.
* Reset is synchronous and active low (`rst_n`). It empties the buffer, closes
  all rows, zeroes θ and loads the configuration defaults.

## Numbers and formats

| quantity | format | default |
|---|---|---|
| θ, predicted rewards, rule rewards, α, γ | signed Q8.8, saturating | θ = 0, α = 0.15 (38), γ = 0.9 (230) |
| ε | unsigned, value/65536 | 0.1 (6554) |
| MRStarvation, thresholds K0..K3 | unsigned Q8.8 | K = 0, 4, 16, 64 cycles per request |
| features | unsigned integers | — |

The published design specifies 16-bit fixed point. The binary point,
saturation, thresholds and rule rewards are choices of this implementation.
All of them can be changed at run time through the configuration port. Its
16-bit registers are:

* 0: α;
* 1: γ;
* 2: ε;
* 4–7: K0..K3;
* 16–31: `rule_reward[4·max+min]`.

| parameter | default | meaning |
|---|---|---|
| NCORES | 16 | cores (K) |
| NBUF | 64 | request buffer entries (n) |
| NBANKS | 32 | DRAM banks (B) |
| HIST_LEN | 100 | HistPet window |
| CLK_RATIO | 9 | CPU clocks per DRAM clock |
| LANES | 1 | core models evaluated per clock in level 1 (four multipliers per lane) |

These are the sizes the published design is dimensioned for (16 cores, a
64-entry buffer, 32 banks). At these defaults the design synthesises (coarse,
generic cells) to roughly 4,900 word-level cells and 6,500 flip-flops. The
published evaluation runs 4-, 8- and 16-core systems. Fewer cores simply leave
core ids unused. One caveat: the evaluated system scales the memory channels
with the core count, and a 16-core system with four channels behind a single
scheduler would need `NBANKS = 64`.

## What is not here, and how far to trust it

* **No DRAM command side.** Turning petitions into ACT/RD/WR/PRE commands, and
  enforcing tRCD, tRP, tFAW and the other timings, is the job of the block that
  drives `bank_ready`. Refresh is invisible to the arbiter's open-row table.
* **Interpretations.** The sequencing between the two levels, the rule table,
  the feature widths (NumPet needs 7 bits to reach 64) and the stall counter
  width (16 bits, not the 6 that a literal reading gives) are this design's
  reading of an incomplete description.
* **No claim about the learned policy.** The RTL reproduces the mechanism. The
  performance figures of the published evaluation came from a full-system
  simulator and are not reproduced here.

## Simulation

Every block has a self-checking testbench in `tb/`, named `tb_<module>`. Each
one prints `TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Irtl rtl/cads_pkg.sv -y rtl -y tb \
          tb/tb_cads_top.sv --top tb_cads_top
./obj_dir/Vtb_cads_top
```

`tb_cads_top` runs the whole scheduler at its default size for about 12,000
DRAM cycles, against `dram_timing_model`. That model is a behavioural
bank-busy model: 14 DRAM cycles after a row hit and 34 after a row conflict,
derived from DDR3-1333 timings. The traffic comes from eight heavy cores and
eight light cores. The run has four phases:

1. all cores, until the buffer fills;
2. light cores only, so the buffer drains;
3. all cores again, with ε written to 0;
4. no new traffic, until the buffer is empty.

The testbench mirrors the buffer and re-derives every issue decision from its
own open-row table and the reported selected core. It checks that each accepted
petition is issued exactly once. It also checks that each mechanism occurs:

* refusals while the buffer is full;
* all four arbitration rules;
* greedy and exploratory choices, with the rate near 10% and zero after ε = 0;
* Q-learning updates and non-zero learned predictions;
* fair and unfair rewards.

`tb_cads_workloads` runs synthetic stand-ins for the evaluated experiment sets
on 4, 8 and 16 active cores, at the default size:

* Intensive: two heavy programs;
* Non-intensive: two light programs;
* MN: one heavy and one light program;
* MMNN: two heavy and two light programs.

Each set runs once with CADS and once with ε written to its maximum (0xFFFF),
which is plain FR-FCFS. For each run it prints the petitions accepted, the refusals per
petition and the mean wait in the buffer, and it checks that every petition is
served. With this simple traffic and bank model the two policies come out
mostly within about 10 % of each other, in both directions (up to about 20 % on
some mixes). CADS does not come out ahead on this traffic. It is a functional
exercise, not a reproduction of the published performance results.

The unit testbenches check cycle counts where the design defines them:

* NCORES + 2 for level 1;
* NCORES + 3 for the reward pass;
* 9 for an update.
