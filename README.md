# ARTA: a reinforcement-learning throttle against RowHammer, in RTL

RowHammer attacks flip bits in DRAM by opening and closing the same rows
over and over. ARTA stops them at the source. It watches the row addresses
that each CPU core makes the memory controller precharge. When a core's
address stream looks like a hammering loop, ARTA asks the processor to lower
that core's clock (a lower P-state) or to idle it (C1). Fewer instructions
per second means fewer row activations, so the attack stalls before any DRAM
row reaches its activation threshold.

Detection uses one cheap statistic: the second-order differences of the
recent row IDs seen in one bank. A hammering loop repeats the same rows or
sweeps them at a fixed stride, and both give second differences of zero.
Ordinary traffic scatters across the bank's 128K rows and gives large ones.
A small Q-table maps the resulting severity to a processor state. It starts
from a hand-shaped initial profile and keeps learning online from a reward.

This repository holds synthesizable SystemVerilog for ARTA as it sits in the
memory controller of a 4-core, single-channel DDR5 system (32 banks,
128K rows per bank), with a self-checking testbench for each block.

## Signal path

```
 PRE command (core, bank group, bank, row)
        |
        v
 arta_top ---- routes by core ID ----> arta_core_agent (one per core)
                                          |
     stage A   arta_cbf: push the row into the bank's 16-entry FIFO
     stage B   arta_severity: sum of |2nd differences| of the bank's window
     stage C   arta_state_quant: score -> relative score -> state 0..10
               arta_qtable: row of Q-values for that state
               arta_policy: best action (or an exploratory one)
               arta_learner: reward and Bellman update of the previous choice
               CBF registers of the bank <- (new state, new action, now)
                                          |
                                          v
                 dfs_valid / dfs_action / cur_action  -> the core's DFS hardware
```

| File | Role |
|---|---|
| `rtl/arta_pkg.sv` | sizes, types, fixed-point constants, the Q0 and a* functions |
| `rtl/arta_cbf.sv` | per-core CBF: 32 bank FIFOs of 16 x 17-bit row IDs, plus per-bank state/action/cycle registers |
| `rtl/arta_severity.sv` | sum of absolute second-order differences over a window |
| `rtl/arta_state_quant.sv` | normalised score, relative severity, quantisation to 11 states |
| `rtl/arta_qtable.sv` | 11 x 6 table of 8-bit Q-values, loaded with Q0 at reset |
| `rtl/arta_policy.sv` | argmax with decaying epsilon-greedy exploration among the 3 actions nearest the optimum |
| `rtl/arta_learner.sv` | reward and Q-learning update |
| `rtl/arta_core_agent.sv` | one core's pipeline and the T_A decision gate |
| `rtl/arta_top.sv` | top level: PRE decoding, 4 agents, cycle counter |

Parts of the system around ARTA are not included: the CPU cores and their
frequency-scaling hardware, the memory controller's scheduler, and the DRAM
with its own PRAC/ABO/RFM defences. ARTA needs none of them to work. It
consumes the controller's PRE commands and produces one processor-state
request per core.

## The severity score

For one (core, bank) pair, the CBF holds the last N_F = 16 row IDs
m[0..15], oldest first. The score is

    d1[i] = m[i] - m[i-1]
    d2[i] = d1[i] - d1[i-1]
    S     = sum over the 14 terms of |d2[i]|
    s_F   = 1 - min(1, S / (beta * 14))

`s_F` is 1 for a perfect repeat or a constant-stride sweep. It falls to 0
once the average |d2| reaches beta. Beta is the spread of rows an attacker
can keep hammering inside one refresh window; here it is 1% of a 128K-row
bank, 1311 rows. Some reference points:

| pattern in one bank | S | s_F |
|---|---|---|
| same row, or rows +1, +1, ... (the 32-sided multi-bank sweep) | 0 | 1.0 |
| double-sided a, a+2d, a, a+2d ... | 14 * 4d | ~1.0 |
| one stride change of X inside the window | X | 1 - X/18354 |
| uniformly scattered rows | ~10^6 | 0 |

**Relative severity.** Throttling a core slows its accesses, which can make
its pattern look milder. So the score is rescaled by the bank's previous
action a_t, whose throttle level is j/5 for P0..P4 (j = 0..4) and 1 for C1:

    s_R = 1                         if the previous action was C1
    s_R = min(1, s_F / (1 - j/5))   otherwise

**Quantisation.** The state is k = floor(10 * s_R), k = 0..10, so state k
stands for severity k/10. The hardware never divides. For every k in
parallel it evaluates the equivalent integer test

    50 * S  <=  (50 - k * (5 - j)) * beta * 14

and the state is the number of k that pass. The tests are monotone in k.

## The Q-table and its starting point

Each core has 11 states x 6 actions of signed 8-bit Q-values with 7
fraction bits (1.0 = 128). Actions 0..5 are P0, P1, P2, P3, P4 and C1.
Without a sensible starting table, an RL agent would have to explore
before it could protect anything. So at reset the table is loaded with a
linear-decay profile. Each action a has a preferred severity interval: P0
covers [0, s_min], C1 covers [s_max, 1], and P1..P4 split [s_min, s_max]
equally. Let c_a be the centre of that interval. Then

    Q0(s, a) = max(0, 1 - lambda*|s - c_a|) / sum over a' of the same

Each state's row sums to 1. The code uses lambda = 1, s_min = 1/3 and
s_max = 8/9. These constants were fitted so that the profile matches the
shape of the authors' published one, where the best action moves from P0
to C1 as severity grows. `arta_pkg::q0_init` computes the table at
elaboration. The reset values, in units of 1/128:

| severity | P0 | P1 | P2 | P3 | P4 | C1 | best |
|---|---|---|---|---|---|---|---|
| 0.0 | 44 | 31 | 24 | 17 | 9 | 3 | P0 |
| 0.1 | 39 | 29 | 23 | 18 | 12 | 7 | P0 |
| 0.2 | 35 | 29 | 24 | 19 | 14 | 9 | P0 |
| 0.3 | 28 | 29 | 24 | 20 | 15 | 11 | P1 |
| 0.4 | 22 | 29 | 25 | 21 | 17 | 13 | P1 |
| 0.5 | 19 | 25 | 27 | 23 | 19 | 16 | P2 |
| 0.6 | 16 | 22 | 26 | 25 | 21 | 18 | P2 |
| 0.7 | 13 | 19 | 23 | 27 | 24 | 21 | P3 |
| 0.8 | 11 | 17 | 21 | 25 | 28 | 25 | P4 |
| 0.9 | 8 | 16 | 20 | 25 | 29 | 30 | C1 |
| 1.0 | 6 | 15 | 20 | 25 | 30 | 34 | C1 |

## Learning

Every decision first scores the choice that the bank made last time, the
pair (s_t, a_t) held in its CBF registers. s_{t+1} is the new relative
state.

    a*(s)  = throttle level nearest to severity s (ties to the lower level)
    d_a    = |a_t - a*(s_t)| / 6          (action indices)
    d_s    = s_t - s_{t+1}                (severities, -1..1)
    r      = w_r * (0.5 - d_a + d_s)
    Q(s_t,a_t) += alpha * (r + gamma * max_a Q(s_{t+1}, a) - Q(s_t,a_t))

The reward is highest when the earlier action matched the severity and the
severity then fell. It lies between -4/3 w_r and 3/2 w_r. This design uses
w_r = 1/4, alpha = 1/8 and gamma = 1/2 (`WR_Q`, `ALPHA_SHIFT`,
`GAMMA_SHIFT` in the package). These values keep Q-values inside the
8-bit range at equilibrium, and the update saturates anyway.

**Choosing the next action.** The policy takes the action with the highest
Q-value in row s_{t+1}; ties go to the lower throttle level. With
probability epsilon it explores instead. It then picks uniformly among the
K = 3 actions nearest a*(s_{t+1}), e.g. {P3, P4, C1} for severity 1.
Epsilon starts at 26/256 and falls by 1/256 with every decision of that
core until it reaches a floor of 2/256. It stays there, so learning never
stops completely. A 16-bit LFSR per core supplies the random numbers.

**A property worth knowing.** Because s_R = 1 whenever the previous action
was C1, a bank whose last action was C1 always sees state 10. The optimal
action for state 10 is C1, so that choice earns a positive reward and C1
tends to stay chosen. That follows from the formulas above. Only
exploration can release such a bank, by trying P3 or P4. Suppose the core's
pattern is in fact mild, with s_F well below 0.2. Then the next relative
severity drops, the reward for (state 10, P4) is large, and after a few such
trials Q(10, P4) overtakes Q(10, C1). The epsilon floor exists to keep that
path open. A testbench exercises it with epsilon held at 1/4. One bank
alternates between hammering and scattered windows. In 27 of 40 rounds the
bank was released, and Q(10, P4) rose from 30/128 to 42/128, above
Q(10, C1) at 32/128. A pattern with s_F of 0.2 or more still reads as severity 1
under P4, however, so it stays at C1. The end-to-end testbench shows this:
a streaming core with row noise (s_F of about 0.7), which is not malicious,
remains at C1. That is the cost of the relative-severity rule. Change
`arta_state_quant` if a different release rule is wanted.

## Timing and the T_A gate

`arta_core_agent` is a three-stage pipeline and accepts one PRE per cycle:

| cycle | stage |
|---|---|
| 0 | PRE arrives; its row is shifted into the bank's FIFO |
| 1 | bank window read; second-difference sum registered |
| 2 | registers read, state, Q lookup, choice, Q update, registers written |
| 3 | `dfs_valid` pulses with `dfs_action`; `cur_action` updated |

Processor-state changes are slow (about 1-2 us), and ACPI requires a
minimum interval between them. So a bank may decide again only after T_A
cycles have passed since its last decision, which is recorded in its 64-bit
cycle register. T_A defaults to t_REFW = 32 ms at the 4 GHz core clock,
i.e. 128,000,000 cycles. For DDR4's 64 ms window, set it to 256,000,000.
A PRE that finds a full window inside T_A only updates the FIFO and raises
`held` for a cycle. A bank also makes no decision until its FIFO holds
N_F rows. Reset sets every cycle register to -T_A, so the first full window
of each bank is acted on at once.

Consecutive PREs to the same bank are safe. Stage C of the second PRE runs
one cycle after stage C of the first, so it already sees the registers and
the Q-value the first one wrote.

## Top-level interface (`arta_top`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock, asynchronous active-low reset |
| `pre_valid` | in | a PRE is issued this cycle |
| `pre_cmd` | in | `{core[1:0], bg[2:0], ba[1:0], row[16:0]}`; bank ID is `{bg, ba}` |
| `dfs_valid[c]` | out | core c made a decision (one-cycle pulse) |
| `dfs_action[c]` | out | the processor state chosen, 0 = P0 ... 5 = C1 |
| `cur_action[c]` | out | the processor state last requested for core c |
| `sev_state[c]`, `obs_state[c]` | out | relative and observed severity state of that decision |
| `held[c]`, `explored[c]` | out | full window held back by T_A; decision was exploratory |
| `now` | out | 64-bit cycle counter used for the time stamps |

Parameters: `T_A` (cycles), `NF` (CBF depth, default 16), and `EPS0` and
`EPS_MIN` (initial epsilon and its floor, in 1/256). All other sizes are in `arta_pkg`.

## Storage

Per core, with the default sizes:

| structure | bits |
|---|---|
| FIFOs, 32 banks x 16 x 17 b | 8,704 |
| registers, 32 banks x (5 + 4 + 64) b | 2,336 |
| Q-table, 11 x 6 x 8 b | 528 |
| fill counters, 32 x 5 b (this design's addition) | 160 |
| pipeline, policy, output registers | ~220 |

The first three rows add up to the 1.4 KB per core that the published
design budgets. The fill counters exist only so that partial windows are
never scored. The FIFOs are written as arrays without reset, so a synthesis
flow can map them to SRAM. The Q-table is held in flip-flops because it
must load Q0 at reset.

## Choices made where the published description is silent

- Shift-register FIFOs, oldest entry first; decisions only on a full window.
- Beta = 1% of 128K rows = 1311 rows. The published text motivates beta with
  floor(t_REFW / t_RC) / 64 and calls that about 1%. With 32 ms and 52 ns
  the expression gives 9615 rows, which is 7.3%. The stated 1% is used.
- Quantisation to 11 states k = floor(10 s). The written formula,
  floor(s * N_S) with N_S = 11, would produce 12 bins, whereas the 11
  states are labelled 0.0 to 1.0 in steps of 0.1.
- Quantisation uses floor, as the published formula does, although the
  surrounding text speaks of the nearest bin.
- Action distance is divided by N_A = 6, as published. The largest distance
  is then 5/6, so the reward cannot reach the stated lower bound of
  -1.5 w_r. Its actual minimum is -4/3 w_r.
- The T_A gate is per bank, because the cycle register is per bank.
- lambda, s_min, s_max, w_r, alpha, gamma, epsilon schedule, K and the LFSR,
  as described above.
- One PRE per cycle, and the core ID supplied with each PRE.
- The 3-cycle pipeline and the output pulse interface.

## Verification

Every testbench in `tb/` checks its results and ends by printing
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_arta_cbf` | FIFO order and shifting, bank independence, full flag, register reset values and writes, against a queue model |
| `tb_arta_severity` | exact sums for repeat, stride, double-sided, kink, full-swing and 1..10-sided patterns, and 300 random windows |
| `tb_arta_state_quant` | observed and relative states at every bin edge, and 2000 random cases, against a division-based reference |
| `tb_arta_qtable` | all 66 reset values against a floating-point Q0, row sums, random writes |
| `tb_arta_policy` | argmax and tie rule; exploration stays within the 3 nearest actions and uses all of them; it stops when epsilon decays to a floor of 0, and goes on at about 4/256 with a floor of 4 |
| `tb_arta_learner` | reward and update against floating-point formulas, including the reward extremes and saturation |
| `tb_arta_core_agent` | C1 for a hammering sweep exactly 3 cycles after the 16th PRE; T_A holds; P0 for scattered rows; state 0.5 observed under P2 becomes relative state 0.8 and leads to P4; reward and Bellman update values; relative state 1.0 after C1 |
| `tb_arta_top` | 60,000 cycles, T_A = 3000: two benign cores, a noisy streaming core and the 32-sided multi-bank attacker. Checks decision latency and T_A spacing for every decision; the attacker is never requested below P3 and ends at C1; benign cores stay within P0..P2 and end at P0; counts holds, explorations (also at the epsilon floor), C1 decisions, rescalings and Q changes |
| `tb_arta_release` | a bank at C1 stays at state 10 on scattered rows; after P3 or P4 it is released to state 0; every Q(10, a) update matches a floating-point Bellman step |
| `tb_arta_top_full` | default parameters (T_A = 128M cycles): all 32 attacked banks request C1 on their first full window; benign banks get P0..P2; every later PRE is held |
| `tb_arta_cbf_sweep` | the 32-sided attack with CBF depths 8, 16, 32 and 128; detection at exactly N_F PREs per bank at every depth |

At the default T_A, a bank's second decision comes 128 million cycles after
its first. The default-size test stops before that. Decisions after an
elapsed T_A, and therefore learning, are exercised only at reduced T_A
(100 to 3000 cycles). The gate compares a 64-bit difference, so its logic
does not depend on the value of T_A.

The published evaluation runs 56 application traces (SPEC CPU, TPC, Hadoop,
MediaBench, YCSB) in a cycle-level DRAM simulator. Those traces are not
reproduced here. The testbenches stand in for them with synthetic benign
streams and the multi-bank attack.

To run one testbench with Verilator 5, from the directory that holds
`rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl +libext+.sv \
    rtl/arta_pkg.sv tb/tb_arta_top.sv --top-module tb_arta_top
./obj_dir/Vtb_arta_top
```

`-Wno-fatal` keeps the build going past Verilator's width notes on
testbench arithmetic. Each testbench finishes in well under a second. It
prints `TB_RESULT checks=N failures=0` when everything matches. A watchdog
ends it with a failure if it hangs.

All of `rtl/` lints with `verilator --lint-only -Wall` without errors. It
also elaborates in Yosys through the slang front end. The remaining lint
warnings are unused package constants, a few unused index bits and
Verilator's note that `rst_n` is used both as an asynchronous reset and in
the `disable iff` of the action-range assertion in `arta_core_agent`.
