# RLWS: a warp scheduler that learns

A GPU streaming multiprocessor (SM) keeps dozens of warps resident and picks
one of them to issue in every cycle. Fixed heuristics such as loose round robin,
greedy-then-oldest or two-level scheduling each suit some kernels and hurt
others. This scheduler does not fix a policy. It runs a small reinforcement
learning agent in every warp scheduler. Each cycle the agent looks at a compact
description of the SM and GPU, picks *which pipeline to feed*, and learns from
whether it managed to issue. It earns a reward of 1 for every cycle in which it
issues a warp and 0 for every stall. Over time it learns which choices lead to
fewer stalls in the near future, for the kernel that is running at that moment.

The RTL here implements the Reinforcement Learning based Warp Scheduler (RLWS)
published by Anantpur, Dwarakanath, Kalyanakrishnan, Bhatnagar and
Govindarajan. It is sized for the configuration they evaluate: a Fermi GTX480
class GPU with 15 SMs, 2 warp schedulers per SM and 24 warps per scheduler. The
agent uses the eight state variables and RL constants that their genetic search
selected. The agent's structure follows the published description. Where that
description stops (fixed-point formats, measurement windows, bucket edges, the
rate-decay schedule, tie-breaking), this implementation makes its own choices.
They are listed in [Choices not fixed by the original description](#choices-not-fixed-by-the-original-description).

## The agent in one cycle

```
             GPU-wide                        per SM
   +------------------+      +--------------------------------------------+
   | gpu_attr_unit    |----->| state register s_c (8 buckets) <- sm_attr_unit
   | AGML GNMIE L2MP  |      |        |                                   |
   +------------------+      |        v                                   |
                             |  theta (5 x 8 weights, shared by both      |
                             |  schedulers)  --> rlws_scheduler 0 --+     |
                             |        ^       --> rlws_scheduler 1 --+--> issue
                             |        |            (SFU/MEM taken by 0    |
                             |  theta_learning_unit  blocks them for 1)   |
                             |        ^                                   |
                             |  rate_controller (alpha, epsilon)          |
                             +--------------------------------------------+
```

Within one clock cycle, each scheduler does the following:

1. **Q values.** For each of the five actions, compute `Q(s,a)` from the shared
   weights and the state register (`q_value_unit`).
2. **Possible actions.** An action is possible when at least one of the
   scheduler's 24 warps is ready with an instruction of that class. SFU or MEM
   actions are masked when scheduler 0 has just taken that shared pipeline.
3. **Action.** Take the possible action with the highest Q value. With
   probability epsilon, take a random possible action instead
   (`action_selector`).
4. **Warp.** Issue the warp this scheduler issued in the previous cycle if it
   matches the action. Otherwise issue the oldest matching warp
   (`warp_selector`).
5. **Learning, at the clock edge.** Update the weights of the *previous*
   action from the reward it earned and the value of the current choice
   (`theta_learning_unit`).

### Actions

| code | action        | meaning |
|------|---------------|---------|
| 0    | `NO_INSTR`    | issue nothing this cycle |
| 1    | `SP_INSTR`    | issue a warp whose next instruction goes to the SP (ALU) pipeline |
| 2    | `SFU_INSTR`   | issue a warp to the special-function pipeline |
| 3    | `GMEM_INSTR`  | issue a warp with a global-memory access to the MEM pipeline |
| 4    | `STCMEM_INSTR`| issue a warp with a shared, texture or constant memory access |

The agent chooses a pipeline, not a warp. The warp rule in step 4 is fixed:
keep the previous warp (greedy), else take the oldest. Choosing `NO_INSTR`
costs a stall on purpose, which lets the agent avoid being greedy. It is never
chosen two cycles in a row while another action is possible.

## The state: eight bucketed variables

The agent sees the SM and GPU through eight variables. Each is cut into 2, 4
or 8 buckets, and the bucket index `v` (0..7) is what the agent sees. The
sub-ranges are unequal on purpose. For a miss rate they shrink towards 100 %.
For counts they grow. In both cases resolution goes where the value matters
most.

| index | variable | measured as | range | buckets | bucket lower edges (% of range) |
|---|---|---|---|---|---|
| 0 | AGML: average global memory latency (GPU-wide) | moving average, weight 1/8, of latency samples | 0-800 | 2 | 50 |
| 1 | GNMIE: memory instructions in flight on the GPU | issued minus completed, all SMs | 0-600 | 8 | 3 7 13 21 32 46 65 |
| 2 | L1MP: L1-D miss percentage | misses per window of 64 L1-D accesses | 0-100 | 8 | 35 54 68 79 87 93 97 |
| 3 | L2MP: L2 miss percentage (GPU-wide) | misses per window of 128 L2 accesses | 0-100 | 2 | 50 |
| 4 | NFMI: warps whose next instruction is a memory access | popcount over the SM's 48 warps | 0-48 | 4 | 10 30 60 |
| 5 | NIPL1M: instructions issued per L1-D miss | issued per window of 16 misses, capped at 100 | 0-100 | 4 | 10 30 60 |
| 6 | NRAI: warps with a ready ALU (SP or SFU) instruction | popcount over 48 warps | 0-48 | 4 | 10 30 60 |
| 7 | SMNMIE: memory instructions in flight on the SM | issued minus completed | 0-40 | 4 | 10 30 60 |

`attr_bucketizer` does each mapping without a divider. A value lies in bucket
`b` when it reaches `b` of the thresholds, compared as
`value*100 >= pct*MAX`. The edges 10/30/60 % come from the original work. The
others are this design's (see below). The three GPU-wide variables are measured
once in `gpu_attr_unit` and broadcast as buckets. The other five are measured
per SM in `sm_attr_unit`. All eight are loaded into the SM's state register on
every clock, so the agent sees the SM as it was one cycle earlier.

## Q values without multipliers

A full table of Q(s,a) would have 2·8·8·2·4·4·4·4·5 entries. Instead, Q is
linear in a feature vector whose feature for variable `i` is `2^-v_i`:

```
Q(s,a) = sum_i theta[a][i] * 2^-s[i]  =  sum_i (theta[a][i] >>> s[i])
```

The weights are therefore the agent's entire memory: 5 actions × 8 variables =
40 signed registers per SM. Every product with a feature is an arithmetic right
shift. Weights are 24-bit two's complement with 16 fraction bits (range ±128).
Q values are 28 bits wide. Rates (alpha, epsilon, gamma) are 16-bit unsigned
fractions of 2^16:

| constant | value | fixed point |
|---|---|---|
| learning rate alpha | 0.09 | 5898 |
| exploration rate epsilon | 0.04 | 2621 |
| discount gamma | 0.95 | 62259 |
| reward / penalty | 1 / 0 | 65536 / 0 |
| initial weight | 2.5 | 163840 |

The initial weight is optimistic. With every weight at 2.5, Q = 20 =
r_max/(1-gamma) in the all-zero state, and no state has a higher Q. Every action
therefore looks good until it is tried, which drives early exploration. All
weights return to this value at every `kernel_start`: learning starts afresh
for each kernel.

## Learning: what happens at the clock edge

This is the part that needs the most care. The agent uses SARSA. Its update
needs the value of the action taken in the *previous* cycle and the value of
the action chosen *now*:

```
delta  = r + gamma * Q(s_c, a_c) - Q(s_p, a_p)
theta[a_p][i] += (alpha * delta) >>> s_p[i]        for i = 0..7
```

In hardware, with cycle `t` as the current cycle:

| quantity | where it comes from |
|---|---|
| `s_c` | state register during cycle t |
| `a_c`, `Q(s_c,a_c)` | chosen combinationally in cycle t from the current weights |
| `a_p`, `Q(s_p,a_p)` | history registers of the scheduler, written at the end of cycle t-1 with that cycle's choice and value |
| `r` | history register: 1 if the scheduler issued a warp in cycle t-1, else 0 |
| `s_p` | copy of the state register from cycle t-1 |

`Q(s_p,a_p)` is stored, not recomputed. It is the value seen when the action
was chosen, so one register holds it. `delta` and `alpha·delta` are the only
true multiplications per scheduler. The feature products are shifts. The new
weights are written at the end of cycle t, so the choice in cycle t+1 already
uses them.

Both schedulers of an SM read and train the same 40 weights. If both took the
same action in cycle t-1, their two increments to a weight are added in the
same edge. Weights saturate at ±128. In the first cycle after a kernel start
there is no history, so nothing is updated.

## Two phases of a kernel

`rate_controller` sets alpha and epsilon. Phase 1 lasts while thread blocks
are still waiting to be assigned to SMs (`tb_waiting`). During phase 1 the SMs
are full, so conditions are steady, and the agent slowly commits to what it has
learned. Every `DECAY_PERIOD` = 1024 cycles both rates lose 1/16 of their
value. They stop at a quarter of the initial value. Once the last block has
been assigned, phase 2 begins. The number of warps then shrinks as blocks
finish. Both rates jump back to 0.09 and 0.04 and stay there until the next
`kernel_start`.

## Two schedulers, shared pipelines

Warp `w` of an SM belongs to scheduler `w % 2`, in slot `w / 2`. An SM can
start at most one SFU instruction and one memory instruction per cycle. So if
scheduler 0 chooses SFU (or a MEM action) in a cycle, that class is removed
from scheduler 1's possible actions before scheduler 1 chooses. Scheduler 0
always has priority.

## Interface of the top, `rlws_gpu`

The scheduler sits between the SM front end, which knows the warps, and the
pipelines. Everything around it is an input or output port:

| port | dir | per | meaning |
|---|---|---|---|
| `kernel_start` | in | GPU | one-cycle pulse at the start of a kernel; restarts learning |
| `tb_waiting` | in | GPU | thread blocks remain to be assigned (phase 1) |
| `warp[s][w]` | in | SM × 48 | `{instr_valid, ready, iclass}` of each warp slot |
| `launch[s]` | in | SM | one bit per slot: a new warp was placed there (it becomes the youngest) |
| `l1_access[s]`, `l1_miss[s]` | in | SM | L1-D events |
| `mem_done[s]` | in | SM | memory instructions completed this cycle (0-3) |
| `lat_valid`, `lat_value` | in | GPU | one global-memory latency sample |
| `l2_access`, `l2_miss` | in | GPU | one L2 access and its outcome |
| `issue_valid[s][k]`, `issue_warp[s][k]`, `action[s][k]` | out | SM × scheduler | the decision (warp id 0-47 within the SM) |
| `explored`, `kept_last`, `other_possible` | out | SM × scheduler | why the decision was made |
| `phase2`, `decay_tick`, `alpha`, `epsilon`, `state`, `theta` | out | SM | learning state, for observation |

`ready` must mean that the warp's next instruction can be issued this cycle:
operands available and target pipeline able to accept it. The issue outputs
are combinational from `warp`, the state register and the weights, with no
registers in between. The pipelines must therefore consume them in the same
cycle.

Parameters of `rlws_gpu`: `NUM_SM` (15), `NUM_SCHED` (2), `WPS` (24 warps per
scheduler) and `DECAY_PERIOD` (1024). Shared types and constants are in
`rlws_pkg`.

## Files

| file | block |
|---|---|
| `rtl/rlws_pkg.sv` | actions, instruction classes, state and weight types, constants |
| `rtl/attr_bucketizer.sv` | value → bucket |
| `rtl/sm_attr_unit.sv` | SM-local state variables |
| `rtl/gpu_attr_unit.sv` | GPU-wide state variables |
| `rtl/q_value_unit.sv` | shift-add Q values |
| `rtl/action_selector.sv` | epsilon-greedy action choice |
| `rtl/warp_selector.sv` | last-warp-or-oldest choice, age matrix |
| `rtl/lfsr16.sv` | random source |
| `rtl/theta_learning_unit.sv` | weights and SARSA update |
| `rtl/rate_controller.sv` | phase-dependent alpha and epsilon |
| `rtl/rlws_scheduler.sv` | one agent |
| `rtl/rlws_sm.sv` | one SM: two agents, shared state and weights |
| `rtl/rlws_gpu.sv` | top |

## Storage and logic

Per SM: 40 weights × 24 bits, an 8 × 3-bit state register and its one-cycle
copy, and per scheduler the history (action, 28-bit Q, reward). There are also
the two rates, the measurement windows, and a 24 × 24 age matrix per
scheduler. The original estimate of N·(A+1)+4 = 52 registers per SM covers
the weights, state, stored Q and constants. The previous-state copy, the
measurement counters and the age matrix come on top of that. The
combinational path in one cycle is the longest part: shift-add tree, maximum
over five values, warp priority encoder, then the update multiply-add. The
design is written for clarity, not pipelined for a clock target.

## Choices not fixed by the original description

These are this implementation's own. Change them freely.

- **Bucket edges.** Only the 4-bucket growing set (10/30/60 %) and a 3-bucket
  miss-rate example are published. The 8-bucket sets are mirror images of each
  other chosen here. The 2-bucket edge is 50 %. Miss rates use shrinking
  sub-ranges and counts use growing ones.
- **Measuring the variables.** Window lengths (64 L1 accesses, 16 L1 misses,
  128 L2 accesses), the AGML moving average and the NIPL1M cap are this
  design's.
- **Warp counts per SM.** The published ranges for warp counts are 0-24 (one
  scheduler's pool). The state, however, is shared by both schedulers of an
  SM, so NFMI and NRAI here count all 48 warps, and their buckets are
  percentages of 48.
- **Fixed point.** The widths and the initial weight (2.5, so that Q = 20 in
  the zero state) are this design's.
- **Rate decay.** The original says only that both rates fall gradually in
  phase 1. The 1/16-per-1024-cycles schedule and its floor are this design's.
- **Tie-breaking and random choice.** Greedy ties go to the lowest-numbered
  pipeline action. A random action is the first allowed one after a random
  start.
- **Shared pipelines.** Scheduler 0 always has priority for SFU and MEM, and
  warps are split between the schedulers by even/odd warp number.
- **State lag.** The state register is one cycle behind the warp status.

Not included: the genetic search that chose the variables and constants. It is
an offline procedure, and its result is built in as the defaults. The
meta-scheduling variant (actions such as "GTO order" or "youngest warp") was
only a comparison, so it is also not included.

## Simulation

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`. The unit testbenches compare against models
written independently, mostly in real arithmetic: bucket edges, Q sums, greedy
and random choices, age order, the SARSA update, the decay schedule and the
windowed measurements.

`tb/gpu_env_model.sv` is a behavioural GPU used by the system tests. It hands
thread blocks of 8 warps to SMs, gives each warp a random instruction mix (55 %
SP, 13 % SFU, 20 % global memory, 12 % other memory) with class-dependent
latencies and random L1/L2 misses, and checks every issue it receives.

- `tb_rlws_gpu` runs two kernels on 2 SMs, with a 64-cycle decay period. It
  requires that exploration, exploitation, a voluntary and a forced
  `NO_INSTR`, keeping the previous warp, taking the oldest warp, a blocked
  shared pipeline, rate decay, the switch to phase 2, weight updates and the
  fresh start at the second kernel each happen at least once.
- `tb_rlws_gpu_full` runs one kernel of 150 blocks on the full 15-SM
  configuration at default parameters. That is 72,000 instructions in about
  8,000 cycles.
- `tb_rlws_workloads` runs the full-size scheduler through 58 kernels back
  to back. Each kernel uses the sizes of one benchmark kernel of the original
  evaluation: its grid size and how many thread blocks are resident on the
  GPU at once. Residency becomes a per-SM limit of ceil(resident/15) blocks
  of 6 warps. A grid is cut to at most twice its residency, so the run stays
  short while both phases still occur. The instruction stream is the
  synthetic mix above, because the kernels' code is not available. For each
  kernel it checks legality, completeness, the residency limit, phase 2 and
  the fresh start of the weights. It also prints the IPC. The whole run is
  1.16 million instructions in about 220,000 cycles.

These IPC figures come from a synthetic environment. They show that the
scheduler works at every occupancy. They say nothing about the speedups
of the original evaluation, which came from a cycle-level GPU simulator
running the real kernels.

With plain Verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/rlws_pkg.sv rtl/*.sv \
    tb/gpu_env_model.sv tb/tb_rlws_gpu.sv --top-module tb_rlws_gpu -o sim
./obj_dir/sim
```

Unit tests use the same command with their own `tb/tb_<block>.sv` and top
module. Only `tb_rlws_gpu`, `tb_rlws_gpu_full` and `tb_rlws_workloads` need `gpu_env_model.sv`. The
testbenches use `$urandom`, so a different seed
(`+verilator+seed+N`) gives a different run.
