# DiSH-style hardware simulator for discrete cell-signalling networks

A signalling network can be modelled as a set of Boolean elements (proteins,
receptors, genes), each with an update rule that computes its next value from
the current values of the others. Simulating such a model means repeatedly
picking which rules to apply, applying them, and watching the state until it
settles. In software most of the time goes on picking rules at random and on
bookkeeping. This RTL does that picking and bookkeeping in hardware. Each
simulation step is one clock cycle, and the index of the next rule comes from
dedicated random-index generators.

The design follows the simulator framework described in *A Faster DiSH:
Hardware Implementation of a Discrete Cell Signaling Network Simulator*
(Gilboy, Sayed, Sundaram, Bocan, Miskov-Zivanov). The block structure, the
schemes and the two index generators come from that description. Widths,
handshakes, timing and several control details are this implementation's
own. They are listed in the section on departures below. The
biological model's update rules are **not** part of this RTL. The top module
exports the state and takes the next state back, so any network can be
attached.

## The update loop

```
             +-------------------+   select   +------------------+
  init_state |  Current State    |<-----------|  Rule Selector   |<- seed, scheme
  ---------->|  Register         |    rule    |  (LFSR, stacks,  |
             +-------------------+            |   mod-E index)   |
                 | state                      +------------------+
                 v                                 ^ enable  | valid
  Inhibitor ---> AND NOT ----> nl_current_state ---+--> network logic (outside)
  Register        |                                           |
  (mask bank)     |    nl_next_state  <-----------------------+
                  +--> AND NOT --> data_in of Current State Register
                  |
                  +--> Previous State Register --> Comparator == state ? -> "steady state"
  Updated Register (one bit per rule) ---------> Comparator == all rules ? -> "steady"
                              Control Path: start, loads, checks, counters, stop
```

* **Current State Register**: one bit per element. A load writes the network's
  next state into the elements of the chosen rule only. Every element carries
  a group number (`elem_group`), and a load with index *r* writes all elements
  whose group is *r*. With one element per group this is the ordinary
  random-order sequential scheme. With several elements per group it is the
  *grouped* variant, where a group is updated simultaneously. In the
  simultaneous scheme every element is written at once.
* **Inhibitor Register**: a bank of four masks. `inhib_sel` selects the active
  one. A 1 in the active mask holds that element at 0, both in the state the
  network sees and in the next state stored back. This is how knock-outs and
  inhibitor drugs are modelled.
* **Updated Register**: one bit per rule. A bit is set when its rule runs.
  When all `num_rules` bits are set, every rule has had its turn. This is
  the *steady* condition that triggers a check.
* **Previous State Register** and the lower comparator: at each check the
  current state is compared with the state saved at the previous check. If
  they are equal the run is in steady state. If not, the current (masked)
  state is saved and a new window starts.

## Update schemes

`scheme` (type `dish_pkg::scheme_e`) selects the scheme at run time.
`num_rules` gives the number of rules or groups.

| scheme | what one step updates | index source | check window |
|---|---|---|---|
| `SCHEME_SMLN` (simultaneous) | every element | none (deterministic) | every step |
| `SCHEME_RB` (round-based RSQ / RSQ-g) | one rule or group | two-stack permutation generator | one round = every rule exactly once |
| `SCHEME_SB` (step-based RSQ / RSQ-g) | one rule or group | (10 LFSR bits) mod `num_rules` | until every rule has been hit at least once |

The grouped variants are not separate hardware. They use the same schemes
with a group map that puts several elements under one index.

## Round-based index generation: two stacks

The difficult part of a round-based scheme is producing a random order of
all *E* rules without duplicates and without wasted draws. `rb_stack_rng`
does it in linear time with two arrays of *E* registers. Each register holds
an item `{Priority, Value}` of log2 *E* bits each.

* **Building stack A.** In each cycle a new item with a random Value (the low
  LFSR bits) is pushed onto A. It is compared with every item already on A,
  all in parallel. For each comparison exactly one side gains a point: the
  new item if its Value is strictly greater, otherwise the existing item.
  The Priority of an item is the number of points it has. Every pair of items
  gives exactly one point, and the winner of each pair follows a total order
  (by Value, with ties going to the older item). So after *E* pushes the
  Priorities are exactly 0 .. *E*-1 in a random order. This holds even though
  the Values are only log2 *E* bits wide and tie often.
* **Consuming stack B.** In the same cycle the top item of B is popped. Its
  Priority is the rule that runs in this step.
* **Swap.** When B is empty and A is full, A is copied into B in a single
  cycle and A is cleared.

Example with four pushes. The Values 1, 2, 6, 4 give the Priorities 0, 1,
3, 2: the item with Value 4 beats 1 and 2, so it ends at 2, and it bumps the
item with Value 6 from 2 to 3. Popping from the top then runs rules 2, 3, 1,
0. `tb_rb_stack_rng` replays this example.

Timing, with Enable held high:

* From the start of a run, *E* cycles fill A and one cycle moves it to B.
  No rule comes out during these *E*+1 cycles. The top reports them as
  `stall`.
* After that, one rule comes out per cycle while A is rebuilt in the
  background.
* The A-to-B copy costs one cycle per round. So does the control path's
  check cycle (see below). A round therefore takes *E*+2 cycles at the top
  level.

## Step-based index generation

Step-based schemes allow a rule to run again before others have run. The
index is *I = X mod E*, where *X* is the low 10 bits of the LFSR. Unlike
taking *X* as the index directly and discarding values at or above *E*, this
never misses. The price is a small bias: (2^10 mod *E*) of the indices get
one code more than the rest. For *E* = 37 those extra codes are 25 of 1024
(2.4%). For the default size of 61 they are 48 of 1024 (4.7%). Raise
`SB_RNG_BITS` in `dish_pkg` to reduce this.

The LFSR is 16 bits wide, with the polynomial x^16+x^14+x^13+x^11+1 and a
period of 65535. `seed` is loaded at every `start`, so a seed reproduces a
run exactly. Both random schemes share the one LFSR.

## Run control

`control_path` is a six-state machine:

1. `IDLE`: waits for `start`.
2. `INIT`: loads `init_state`, clears the Updated Register, reseeds the LFSR
   and empties the stacks.
3. `PRIME`: saves the masked initial state as the previous state.
4. `RUN`: requests an index each cycle. Every valid index loads the Current
   State and Updated Registers at the next edge. `step_count` counts the
   loads.
5. `CHECK`: entered one cycle after the Updated Register is full. If the
   state equals the previous state, the run stops in steady state. Otherwise
   the state is saved, Updated is cleared and `RUN` resumes. `round_count`
   counts the checks.
6. `DONE`: holds the result until the next `start`.

Other ways a run ends or changes:

* **Budget.** A run also stops when `max_count` is used up. The budget counts
  rounds in the round-based scheme and steps otherwise, for example 30 rounds
  or 2000 steps. `stop_reason` reports `STOP_STEADY` or `STOP_LIMIT`.
* **Toggle scenarios.** If `toggle_en` is set, then after `toggle_at` rounds
  (RB) or steps (SB, SMLN) one cycle inverts the elements in `toggle_mask`.
  This models, for example, antigen removal partway through a run. Until the
  toggle has happened the run does not stop at steady state.

Cycle costs at the top level:

| scheme | cost |
|---|---|
| SMLN | 3 cycles per step (update, Updated seen full, check) |
| RB | *E*+1 cycles of initial fill, then *E*+2 cycles per round |
| SB | 1 cycle per step, plus 2 cycles at the end of each check window |

Each run also has 2 cycles of overhead (INIT and PRIME).

## Attaching a network

`dish_top` drives `nl_current_state`, which is the state with the active
inhibitor mask applied. It expects `nl_next_state` back combinationally in
the same cycle. For a Boolean model, `nl_next_state[i]` is element *i*'s
update rule evaluated on `nl_current_state`. Set up a run as follows:

* Set `scheme` and `num_rules`.
* Fill `elem_group`. Every element needs a group below `num_rules`, or it is
  never updated and steady state is never reached.
* Set `init_state`, `seed`, `max_count` and the toggle inputs.
* Pulse `start`. Then watch:
  * `rule_valid` / `rule`: the index used in this cycle.
  * `rule_all`: this step updates every element (SMLN).
  * `step_done`: `state` shows the result of the previous update.
  * `check`, `toggle_pulse`, `done`, `stop_reason`.
* Write inhibitor masks with `inhib_load`, `inhib_sel` and `inhib_data`.
  They keep their values across runs.

Trajectories for averaging, for example the fraction of runs in which an
element is on after each step, are collected outside the design from `state`
at `step_done`. The same applies to repeating a scenario many times with
different seeds or random initial states.

## Sizes

All sizes are parameters. `dish_pkg` holds the defaults:

| parameter | default | meaning |
|---|---|---|
| `NUM_ELEM` | 61 | elements, and the maximum number of rules or groups. 61 fits a T-cell differentiation model with 52 free and 9 forced elements. |
| `LFSR_W` | 16 | random source width |
| `SB_RNG_BITS` | 10 | bits of *X* in *I = X mod E* |
| `COUNT_W` | 16 | step and round counters, budget, toggle point |
| `NUM_INHIB` | 4 | entries in the inhibitor bank |

The stacks grow as `NUM_ELEM` × 2·log2(`NUM_ELEM`) flip-flops each, with
`NUM_ELEM` parallel comparators for the push. At 61 elements the whole
simulator is about 1600 flip-flops.

## Files

* `rtl/dish_pkg.sv`: sizes, `scheme_e`, `stop_e`.
* `rtl/dish_top.sv`: the simulator.
* `rtl/control_path.sv`: the run sequencer.
* `rtl/rule_selector.sv`: the scheme selection. It contains:
  * `rtl/lfsr.sv`
  * `rtl/rb_stack_rng.sv`: the round-based generator.
  * `rtl/sb_index_gen.sv`: the step-based generator.
* The registers:
  * `rtl/current_state_register.sv`
  * `rtl/inhibitor_register.sv`
  * `rtl/updated_register.sv`
  * `rtl/previous_state_register.sv`
* `rtl/comparator.sv`: the equality comparator.
* `tb/tb_<module>.sv`: one self-checking testbench per module.
* `tb/tb_dish_top.sv`: runs every scheme end to end at the default size. It
  covers stack fill, swap, checks, both stop reasons, the toggle, inhibition
  and grouped updates, and fails if any of them never happened.
* `tb/tb_scenarios.sv`: runs eight input scenarios under all five schemes,
  with 30-round and 2000-step budgets and toggles after 20%, 26.67% and
  33.33% of the run.

The two system-level testbenches attach a small test network in place of a
biological model. Elements 0 to 8 are held inputs. Every other element *i*
computes `(x[i-1] & ~x[i%9]) | (x[i-2] & x[(5i)%9])`. Each step is replayed
on a reference model in the testbench and the whole state vector is
compared.

Simulate with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb rtl/dish_pkg.sv \
    tb/tb_dish_top.sv --top-module tb_dish_top
obj_dir/Vtb_dish_top
```

Every testbench ends by printing `TB_RESULT checks=N failures=M`.

## Departures from the published description, and open points

* **Network logic is not included.** The model's update rules are not part
  of the description this design follows. The top brings the network
  interface out as ports.
* **Inhibitor loading.** The framework drawing shows `Load Inhibitor` and
  `Select Inhibitor` as outside inputs. The prose also has the control path
  loading the inhibitor register. This design follows the drawing: masks are
  written from outside, and the control path only loads the state, Updated
  and Previous State registers.
* **Pins without a defined role.** The drawing gives the Inhibitor and
  Updated registers "Data In" and "Initial State" pins, but their function is
  not spelled out.
  * Inhibitor Register: an addressed mask bank, cleared at reset.
  * Updated Register: a set-bit-on-load, clear-on-check register sized by
    `num_rules`.
* **Mask polarity.** A 1 in a mask forces the element to 0 (state AND NOT
  mask). The exact gates between the registers and the network are not
  specified.
* **When the steady-state check happens.** The check runs once every rule has
  been run since the last check. Stopping at the first steady state, the
  budget, and the toggle mechanism are this design's reading of "run for a
  number of steps or rounds, from the initial to the steady state", and of
  the toggle scenarios.
* **Cycle timing is this design's.** This includes the one-cycle stack swap,
  the check cycle and 3 cycles per SMLN step. The published cycle totals,
  counted over batches of 200 runs, cannot be reproduced without the original
  model and controller.
* **Model size.** The element count of 61 is derived, not stated. It comes
  from the 52 randomly initialised elements plus the 9 forced inputs named
  for the scenarios.
* **Random initial states for SMLN runs.** These are supplied through
  `init_state`. There is no on-chip generator for them.
* **Step-based bias.** With 61 rules and 10 random bits, the bias of the
  modulo index is 4.7%. That is above the 3% target quoted for a 37-element
  example.
* **Clock.** The 50 MHz clock used for the runtime estimates is only a
  reference figure. No timing constraints come with this RTL.
