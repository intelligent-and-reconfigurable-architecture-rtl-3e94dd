# A reconfigurable KLUCB / UCB bandit accelerator

This design is a hardware engine for the stochastic multi-armed bandit problem.
An agent must pick one of K "arms" in each time slot, such as a radio channel,
a route or an antenna. It then gets a 0/1 reward and must learn which arm pays
best while losing as little reward as possible along the way.

Two index policies are built in:

* **UCB.** The index of arm k in slot n is

  `Qu(k,n) = X/T + sqrt(alpha * ln n / T)`

  Here X is the reward count of arm k and T is its play count. It is cheap to
  compute, but it explores for a long time.
* **KLUCB.** The index is the largest q for which `T * d(X/T, q) <= ln n + c ln ln n`,
  where d is the Bernoulli Kullback-Leibler divergence. It settles on the best
  arm with far fewer wasted plays, but it needs an iterative search every slot.
  It is about ten times slower in this design.

The engine does three things to get KLUCB's learning speed at close to UCB's
running cost:

1. It computes the KLUCB index with a fixed number (BETA) of bisection steps.
   Each step reuses the same divergence datapath.
2. It computes the UCB index in the same pass.
3. It watches how often the two policies would pick the same arm. Once they
   agree most of the time, the KLUCB exploration is over, and the engine
   switches itself to UCB for the rest of the experiment.

Arms can be enabled or disabled at run time, and each arm can be forced to
either policy. This replaces the partial reconfiguration of per-arm logic
regions in the system the design is taken from.

Everything is synthesizable SystemVerilog-2017 with no vendor primitives. The
processor that supplies rewards is outside the design. It talks to the design
through one AXI4-Lite slave port.

## One slot, end to end

The processor does the following for every slot:

1. Write the feedback word for the previous slot to `FEEDBACK`.
2. Poll `STATUS` until bit 8 ("I_n valid") is set. Alternatively, watch the
   `arm_valid` output port.
3. Play arm `I_n = STATUS[7:0]` and observe its reward.
4. Go to step 1.

The feedback word has `AW + 2` bits, where `AW = clog2(KMAX+1)`. That is
5 bits for KMAX = 4:

```
 bit AW+1   bit AW     bits AW-1..0
 R          restart    arm I_{n-1}   (1..KMAX, 0 = none)
```

* R is the reward just observed for arm I_{n-1}.
* A word with `restart = 1` clears all counters and begins a new experiment.
  That word does not count as a slot.
* Arms are numbered from 1, so the very first word of an experiment is simply
  `restart = 1, arm = 0`.

Inside `mab_top`, a small slot controller (IDLE, QF, SEL) sequences the
blocks:

* `param_update` decodes the word. X(k), T(k) and n are updated on the same
  clock edge. `upd_done` follows one cycle later.
* **INIT slots.** The first K slots of an experiment are INIT slots, where K is
  the number of enabled arms. Each enabled arm is played once, in an order
  given by `init_arm_sel`. The quality-factor units and the arm selector are
  bypassed. A multiplexer controlled by `init` passes the INIT arm straight to
  the output, and the slot completes in a few cycles.
* **Learning slots.** After INIT, one `qf_calc` per arm computes its quality
  factor (QF) in parallel. QF is the KLUCB or the UCB index, depending on the
  arm's mode. `arm_select` then reduces them to `I_n = argmax Q`. In the same
  pass it also computes `C_n`, which is 1 when the argmax of the UCB indices
  is the same arm.
* **End of slot.** `C_n` goes to `intelligence_unit`. `I_n`, `C_n` and the
  flags are latched into `STATUS` and onto the output ports (`arm_out`,
  `arm_valid`, `cn_out`, `init_out`, `ucb_active`).

The slot controller raises an assertion if a feedback word arrives while a slot
is still being computed. The processor must wait for `I_n`.

Measured slot time at the default sizes is the number of clocks from the
feedback write until I_n is valid, AXI transfer included:

| Mode | Cycles per slot |
|---|---|
| KLUCB | about 1,305 |
| UCB | about 136 |

That ratio of 9.6 is what the automatic switch buys.

## Register map

All registers are 32 bits wide.

| Offset | Name | Access | Contents |
|---|---|---|---|
| 0x00 | FEEDBACK | W | Feedback word in the low AW+2 bits. Each write starts one slot. |
| 0x04 | CONFIG | RW | `[KMAX-1:0]` arm enable (reset: all enabled). `[8+k]`: arm k+1 forced to UCB (reset: KLUCB). `[16]`: automatic KLUCB-to-UCB switch (reset: on). |
| 0x08 | C | RW | Constant c of the KLUCB exploration level, Q15.16 (reset 0). |
| 0x0C | ALPHA | RW | Constant alpha of the UCB index, Q15.16 (reset 2.0). Values from 0.5 to 2 are the intended range. |
| 0x10 | STATUS | R | `[7:0]` I_n, `[8]` I_n valid, `[9]` C_n, `[10]` INIT slot, `[11]` switched to UCB, `[12]` busy. |
| 0x14 | SLOT | R | Slot number n. |
| 0x18 | SWITCH | R | Slot at which the automatic switch happened (0 = not yet). |

CONFIG should be changed only between experiments, followed by a restart
word. That is the run-time counterpart of reconfiguring the regions. With
fewer arms enabled, INIT is shorter, and disabled arms never win selection.

On the bus side:

* Write address and write data may arrive in either order.
* BVALID and RVALID are held until accepted; assertions check this.
* WSTRB is ignored, so only full-word writes are supported.
* Every response is OKAY.

## Number format and arithmetic units

All QF arithmetic uses one signed fixed-point format, Q15.16: 32 bits with 16
fraction bits (`mab_pkg::fx_t`). Counters are 15 bits (`cnt_t`), so n, X and T
up to 32,767 convert exactly into the integer part. Multiplication is a
combinational `fx_mul` with truncation.

Divide, logarithm and square root are sequential units. Each takes a one-cycle
`start` pulse and raises a one-cycle `done` pulse after a fixed latency. The
result is held until the next start. The latencies below are exact and are
checked by the testbenches.

| Unit | Method | Latency (defaults) | Edge cases |
|---|---|---|---|
| `fx_div` | radix-2 restoring divide on magnitudes | FX_W+FX_F+1 = 49 | Divide by zero or overflow saturates to FX_MAX or FX_MIN. |
| `fx_log` | natural log: leading-one position plus one fraction bit per repeated squaring, then a multiply by ln 2 | FX_F+2 = 18 | ln(x <= 0) = FX_MIN. |
| `fx_sqrt` | digit-by-digit root, two radicand bits per clock | (FX_W+FX_F)/2+1 = 25 | Negative input gives 0. Result is the floor. |

The testbench tolerances give the accuracy: the divider is exact (truncated),
the log is within a few LSB, and the root is exact (floor).

## Quality-factor calculation (`qf_calc`)

This is the hardest part of the design, and the part that sets the slot time.

### Pre-processing (`qf_preproc`)

From X, T and n it produces:

```
S1 = X / T                        empirical mean, also the first lower bound l(1)
S2 = (ln n + c * ln ln n) / T     KLUCB exploration level
u1 = min(1, S1 + sqrt(S2 / 2))    first upper bound u(1)
Qu = S1 + sqrt(alpha * ln n / T)  UCB index
```

`u1` is a valid upper bound by Pinsker's inequality, d(p,q) >= 2(p-q)^2. This
is why the S2/2 appears.

One divider, one log unit and one square-root unit are shared, in four phases.
Units within a phase run side by side:

```
A: S1 = X/T              || L1 = ln n
B: U = alpha*L1/T        || L2 = ln L1          (KLUCB only)
C: sqrt(U) -> Qu         || S2 = (L1+c*L2)/T    (KLUCB only)
D: sqrt(S2/2) -> u1                             (KLUCB only)
```

In UCB mode the second log, the S2 divide, the second root and the min are
skipped. Pre-processing latency is 2·DIV + SQRT + 4 = 127 cycles for UCB and
3·DIV + SQRT + 4 = 176 cycles for KLUCB.

When n = 1, ln n = 0 and ln ln n is undefined. The c·ln ln n term is then
dropped.

### Bisection loop (`klucb_iter` and `kl_div`)

Starting from [l, u] = [S1, u1], each step does the following:

```
m = (l + u) / 2
if d(S1, m) > S2:  u = m     (m is beyond the confidence level)
else:              l = m
```

After BETA steps, the QF is u.

`kl_div` computes `d(p,q) = p ln(p/q) + (1-p) ln((1-p)/(1-q))` with two
branches in parallel, each a divide, a log and a multiply, followed by one
adder. `p ln p` is taken as 0 at p = 0 or 1. q >= 1 with p < 1 gives FX_MAX.
`klucb_iter` adds the comparison with S2 and two multiplexers that feed m back
as the new l or the new u.

The steps depend on each other, so a single `klucb_iter` is reused BETA times.
One step takes DIV + LOG + 2 = 69 cycles. With BETA = 16, the loop adds
16 × 70 = 1,120 cycles to the pre-processing. That is why KLUCB slots are about
ten times longer than UCB slots.

Fewer steps make KLUCB faster but coarser. After BETA steps the interval is
`(u1 - S1) / 2^BETA` wide.

## Arm selection and the agreement flag (`arm_select`, `selector`)

`selector` is one node of a comparison tree. It compares two `{valid, Q,
index}` candidates with `>=` and passes on the winner through a register.

* A disabled arm is an invalid candidate and always loses.
* On a tie, the lower-numbered arm wins.
* With four arms, the tree is (1,2) and (3,4), then the two winners. For other
  KMAX, the leaves are padded to a power of two, and the latency is
  clog2(KMAX) cycles.

A second tree of the same shape runs on the UCB indices. `C_n` is 1 when both
trees pick the same arm. When every arm is already in UCB mode, the two trees
see the same numbers, so `C_n` is 1.

## Switching from KLUCB to UCB (`intelligence_unit`)

While KLUCB is still exploring, it often disagrees with UCB. Once it has
settled on the best arm, UCB's choice converges to the same arm.

The unit works as follows:

* It keeps the last WINDOW values of `C_n` in a shift register, along with a
  running count of ones. Only learning slots are counted; INIT slots are not.
* When the window is full and more than half of it is 1, `switched` rises.
  From the next slot on, every arm computes UCB.
* The switch holds until the next restart.
* CONFIG bit 16 turns the mechanism off.
* `SWITCH` records the slot at which the switch happened.

How early the switch comes depends on alpha, on c and on the window. With
alpha = 2, UCB keeps exploring for much longer than KLUCB, and the two
rarely agree within 10,000 slots. With alpha = 0.5 they agree soon. With arm
means only 0.01 apart, a run of `tb_mab_demo` switched at slot 472 with
three arms and at slot 131 with four. The system this design follows reports
the switch at slots 1,526 and 1,809 for the same kind of experiment, but it
does not give the window or the constants it used.

In the default-size simulation, with four arms of means 0.2/0.4/0.6/0.8 and
alpha = 0.5, the switch happened at slot 130 or 131. That is the first slot at
which the 128-slot window can be full after INIT.

## Initialization and counters (`param_update`, `fb_decoder`, `init_arm_sel`, `update_counter`)

`fb_decoder` is combinational. It turns a feedback word into enables:

| Enable | Condition |
|---|---|
| n_en | any non-restart word |
| T_en(k) | the word names arm k |
| X_en(k) | the word names arm k and R = 1 |
| restart | the restart bit is set |

Each counter is an `update_counter`: a register with +1 feedback, an enable
and a synchronous clear that has priority over the enable.

`init_arm_sel` produces the INIT order with a maximal-length LFSR of AW bits.
For AW = 3 the polynomial is x^3+x^2+1, and the state sequence is
1,2,5,3,7,6,4. Values that are not enabled arms are skipped, so each enabled
arm appears exactly once in K slots. With all four arms enabled the order is
1,2,3,4.

INIT lasts while n < K, where K is the number of enabled arms.

## Where this design departs from the system it implements

* **Fixed point instead of floating point.** The original uses floating-point
  cores. With Q15.16 and truncating units, the testbenches accept an index
  error of up to 0.01. The arm means that the original evaluates also differ
  by 0.01, so a choice between two nearly equal indices can come out
  differently than it would in floating point.
* **0/1 rewards only.** X counts rewards equal to 1. Rewards with other
  values, such as exponential or Poisson ones, would need a wider feedback
  word and an adder in place of the X counter. Neither is built.
* **Run-time configuration instead of partial reconfiguration.** Per-arm
  enable and mode bits take the place of loading blank, UCB or KLUCB logic
  into four reconfigurable regions. All four QF units are always present and
  each contains both datapaths. The area therefore corresponds to the
  "all KLUCB" configuration at all times.
* **The switch decision is in hardware.** The original makes it in processor
  software. Its rule is "majority of C_n = 1 over a window". The window length
  (128) and the sliding window are choices made here.
* **Start/done strobes instead of AXI4-Stream.** Internal blocks use strobes
  instead of AXI4-Stream links with wrappers. Latency is therefore fixed and
  known.
* **Not built.** UCB-V and UCB-T indices are not built. Their equations are
  not given.
* **Not RTL.** The processor, the reward generation, the bus interconnect,
  the decoupler and the reconfiguration controller are outside the RTL. The
  top exposes a single AXI4-Lite slave in their place.
* **Arm numbering and the feedback width.** Arms are numbered 1..KMAX in a
  3-bit field, and the feedback word is 5 bits. The source text also mentions
  a log2(KMAX)+2 = 4-bit word. Here the figure's 5-bit form with 1-based arm
  numbers was followed.
* **The S2/2 halving.** The source algorithm halves S2 before the square root
  in u1, but one drawing omits the halving. The algorithm was followed.
* **Fixed BETA.** BETA is an elaboration parameter (default 16). Evaluating
  BETA = 4, 8 or 12 needs a rebuild with the parameter overridden.

## Parameters

| Parameter | Default | Where | Meaning |
|---|---|---|---|
| KMAX | 4 | mab_top | Number of QF units, which is the maximum number of arms. |
| BETA | 16 | mab_top, qf_calc | KLUCB bisection steps. |
| WINDOW | 128 | mab_top, intelligence_unit | C_n majority window in slots. |
| FX_W, FX_F | 32, 16 | mab_pkg | Fixed-point width and fraction bits. |
| CNT_W | 15 | mab_pkg | Width of n, X and T. |

At the defaults, synthesis with a generic gate library gives about 2,800
cells and 6,300 flip-flops for the whole engine.

## Simulating

Every block has a self-checking testbench in `tb/`. Each one:

* prints `TB_RESULT checks=<n> failures=<n>` and ends with `$finish`;
* has a cycle watchdog;
* compares against values computed in the testbench, using `real` arithmetic
  or a bit-accurate integer model, independently of the RTL.

With Verilator 5, the package must come first:

```
verilator --binary --timing --assert -Wno-fatal --Mdir obj \
  rtl/mab_pkg.sv $(ls rtl/*.sv | grep -v mab_pkg) \
  tb/tb_kl_div.sv --top-module tb_kl_div
./obj/Vtb_kl_div
```

The end-to-end tests also need the processor model `tb/mab_host.sv` on the
command line:

* **`tb_mab_top`** uses BETA = 4 and WINDOW = 16. It runs 300 slots on four
  arms, then 150 slots on two arms with arm 1 on UCB, then a short restarted
  run. It takes well under a second.
* **`tb_mab_full`** uses the default parameters.
  * Experiment 1 uses the four-arm workload {0.2, 0.4, 0.6, 0.8} over
    10,000 slots.
  * Experiment 2 is a 3,000-slot run on three arms with means
    {0.51, 0.52, 0.53}, with arm 1 forced to UCB.
  * It runs in a few seconds and performs about 105,000 checks.

* **`tb_mab_beta`** builds four copies at BETA = 4, 8, 12 and 16 and runs
  both four-arm workloads, {0.2, 0.4, 0.6, 0.8} and {0.51, 0.52, 0.53, 0.54},
  for 10,000 slots each on every copy. It checks that each extra bisection
  step costs exactly 70 cycles. It prints the trade-off between slot time and
  reward, and runs in about half a minute:

  | BETA | KLUCB slot (cycles) | Reward, first workload | Reward, second workload |
  |---|---|---|---|
  | 4 | 465 | 7913 | 5278 |
  | 8 | 745 | 7965 | 5259 |
  | 12 | 1025 | 7987 | 5297 |
  | 16 | 1305 | 7918 | 5371 |

  The rewards vary with the random seed by about ±50.

* **`tb_mab_demo`** runs at the default parameters. It first runs three
  arms with means {0.51, 0.52, 0.53} for 10,000 slots. It then enables a
  fourth arm with mean 0.54 and runs another 10,000 slots. It reports the
  switch slot and how often each arm was played, and it checks that the
  SWITCH register agrees with the model.

`mab_host` acts as the processor. It draws Bernoulli rewards with `$urandom`
and keeps its own X, T and n. For every slot it checks the following against
a real-valued model:

* The INIT order covers each enabled arm once.
* The chosen arm's index is within 0.01 of the best index.
* C_n is correct wherever the choice is unambiguous.
* The switch happens in exactly the slot the majority rule predicts.
* The registers agree with the ports.
* The slot latency is constant within each mode.
* UCB slots are faster by the stated factor.

It also counts each mechanism and fails if one never occurred: INIT, KLUCB
slots, UCB slots, the automatic switch, C_n = 0 and 1, restart, changing the
number of arms, and a mix of KLUCB and UCB arms.

## How far to trust it

* All blocks compile cleanly and pass their testbenches.
* Each testbench was also run against a copy of its block with one deliberate
  bug, and it caught the bug.
* The end-to-end test follows the model slot by slot at full size.
* Not verified: behaviour beyond 32,767 slots, where the counters wrap. Start a
  new experiment before that point.
* Not verified: the AXI port under back-pressure patterns other than those in
  `tb_axil_regs`.
* Not verified: timing closure on any device. The long slot time comes from
  sequential units, not from deep logic, so no path is longer than a 32-bit
  add/compare or the Q15.16 multiply in `fx_mul`.
