# A low-power Perturb-and-Observe MPPT controller with an adaptive tracking clock

An energy harvester (a small solar cell, a thermoelectric generator) delivers
its largest power only at one operating point, and that point moves with light,
temperature and load. A DC-DC converter between the harvester and the battery
sets the operating point through the duty cycle of the PWM signal that switches
its power transistor. This controller finds and follows the maximum power point
(MPP): it watches the harvester's voltage and current, nudges the duty cycle,
and keeps the direction that raised the power.

The idea beyond a textbook Perturb-and-Observe tracker is power saving in the
controller itself. Dynamic power grows with clock frequency, and once the
tracker has settled there is little to do. So the tracker asks for its own
clock: fast while the measured power changes a lot, down to 1/1000 of that rate
once the power change is close to zero. The duty-cycle step also grows with the
size of the power change, so large disturbances are followed quickly and the
settled point is held with fine steps.

The RTL here is a SystemVerilog description of the controller published by
Hudec, Nagy, Kovac and Stopjakova ("Maximum Power Point Tracking Circuit for an
Energy Harvester in 130 nm CMOS Technology"). That publication gives the block
structure, the word widths, the division ratios, the averaging sizes and the
flow charts of each block; it does not give thresholds, step sizes, codes or
reset behaviour. Those are this design's own choices and are listed in
[What is taken from the publication and what is not](#what-is-taken-from-the-publication-and-what-is-not).

## Block structure

```
                 PWM frequency (8)      voltage (8)  current (8)  averaging (2)
                        |                    |           |           |
                        v                    v           v           v
 System Clock  +------------------+   +----------------------------------+
 ------------->| power_management |   |         tracking_system          |
               |                  |<--| clk_req (2)          pwm_cmp (8) |--+
               |           clk_ts |-->| clk                              |  |
               |                  |   +----------------------------------+  |
               |          clk_pwm |--+                                      |
               +------------------+  |   +-------------------------------+  |
                                     +-->| clk     pwm_generator  cmp_in |<-+
                                         |                      pwm_out  |------> to DC-DC
                                         +-------------------------------+
 NRST (active low, asynchronous) goes to all three blocks.
```

| Module             | What it does |
|--------------------|--------------|
| `mppt_top`         | Wires the three blocks; ports `sys_clk`, `nrst`, `pwm_freq`, `voltage`, `current`, `averaging`, `pwm_out`. |
| `power_management` | Two counter dividers: the tracking clock (System Clock / 2, 20, 200 or 2000, chosen by the Clock Request) and the PWM clock (System Clock / 2(pwm_freq+1)). |
| `tracking_system`  | Averages voltage and power, makes the Perturb-and-Observe decision, steps the PWM compare value by a variable amount, issues the Clock Request. |
| `pwm_generator`    | 8-bit counter and comparator; output high while counter < compare value; the compare value is reloaded only at counter overflow. |
| `mppt_pkg`         | The Clock Request and Averaging code enums, widths, the reset compare value, the averaging-code decoder. |

The controller has three clock domains, all derived from System Clock by
flip-flops: System Clock itself (dividers only), the tracking clock and the PWM
clock.

## The tracking system

This is the part that needs the most care, both to read and to use.

### Sampling and averaging

On every rising edge of its clock the tracker takes one 8-bit voltage sample
and one 8-bit current sample and forms the instant power P = V x I (16 bits).
Samples are summed over a window of N = 1, 8, 32 or 64 clocks. N is selected by
the 2-bit `averaging` input, read at the first sample of each window (changing
it mid-window has no effect until the next window):

| `averaging` | 00 | 01 | 10 | 11 |
|-------------|----|----|----|----|
| samples N   | 1  | 8  | 32 | 64 |

At the window's last sample the two sums are shifted right by log2 N, giving
the averaged power P[n] (16 bits) and voltage V[n] (8 bits, truncated). Note
that power is averaged sample by sample, not formed from averaged V and I, so
P[n] keeps sub-LSB resolution when the inputs carry noise. The power
accumulator is 22 bits, which holds 64 x 255 x 255 exactly.

### Decision

With dP[n] = P[n] - P[n-1] and dV[n] = V[n] - V[n-1]:

| power went up | voltage went up | duty cycle |
|---------------|-----------------|------------|
| yes           | yes             | decrease   |
| yes           | no              | increase   |
| no            | yes             | increase   |
| no            | no              | decrease   |

so "increase" = (power up) XOR (voltage up). For a boost converter, where a
larger duty cycle lowers the harvester voltage, this is the classic rule: keep
going in the direction that raised the power, reverse otherwise. The rule does
not need to know the last step's direction; the voltage change stands in for
it.

**The one real ambiguity.** The original flow chart writes the two tests as
"dP[n] > dP[n-1]" and "dV[n] > dV[n-1]", i.e. differences compared with the
previous differences, while its text says several times that the present values
are compared with the previous values. The parameter `CMP_PREV_DIFF` selects
the reading:

* `CMP_PREV_DIFF = 0` (default): "up" means dP[n] > 0 and dV[n] > 0.
* `CMP_PREV_DIFF = 1`: "up" means dP[n] > dP[n-1] and dV[n] > dV[n-1], the
  flow chart taken literally.

The default is chosen because the literal reading does not track well. On a
concave power curve a run of equal steps down makes both tests fail each time,
which asks for yet another step down. In the closed-loop test described below,
the literal reading reached 89 %, 98 % and 77 % tracking efficiency in the
three averaged phases (against 99.5 %, 99.9 % and 97.3 % for the default) and
drifted to compare values of 4 to 21 in the phases with little averaging.
Both readings are covered by the unit testbench.

### Variable step and Clock Request

The magnitude |dP[n]| selects both the step size and the clock the tracker asks
for (defaults; all thresholds and steps are parameters):

| \|dP[n]\|        | step of the compare value | Clock Request | tracking clock |
|------------------|---------------------------|---------------|----------------|
| >= 4096 (`TH_0`) | 8 (`STEP_0`)              | 00            | System Clock / 2    |
| >= 512 (`TH_1`)  | 4 (`STEP_1`)              | 01            | System Clock / 20   |
| >= 64 (`TH_2`)   | 2 (`STEP_2`)              | 10            | System Clock / 200  |
| < 64             | 1 (`STEP_3`)              | 11            | System Clock / 2000 |

The compare value saturates at 0 and 255. There is no dead band: a settled
tracker still perturbs by one count per decision and oscillates around the MPP
by a count or two, as any Perturb-and-Observe tracker does.

### Timing

* One decision per window: every N tracking clocks. `pwm_cmp` and `clk_req`
  change on the edge that takes the window's last sample and stay constant
  otherwise (an assertion in the module checks this).
* After reset: `pwm_cmp` = 128 (50 % duty), `clk_req` = 00. The first window
  only stores P and V. From the second window on dP is known, so `clk_req` is
  updated and (default reading) the duty cycle moves. With `CMP_PREV_DIFF = 1`
  the duty cycle first moves in the third window, which needs dP[n-1].
* In System Clock cycles, a decision takes N x (2, 20, 200 or 2000).

## Power management

The tracking clock `clk_ts` comes from a counter that toggles a flip-flop every
ratio/2 System Clock edges, so it always has a 50 % duty cycle. The ratio is
held in a register that loads the Clock Request only at a falling edge of
`clk_ts`. The tracker changes its request on a rising edge, so the high phase
in progress always finishes at the old ratio and the new ratio starts with the
following low phase: no pulse is ever shortened. Requests are the codes of
`mppt_pkg::clk_req_e`; 00 is the fastest (System Clock / 2, the highest rate a
rising-edge counter can produce), 11 the slowest.

The PWM clock `clk_pwm` toggles every `pwm_freq`+1 System Clock edges, so its
period is 2(`pwm_freq`+1) System Clock cycles. `pwm_freq` is meant as a static
setting. The publication names this input "PWM frequency" but does not say how
it maps to a frequency; a plain divider is this design's choice.

After reset both clocks are low and the tracking ratio is 2.

## PWM stage

An 8-bit counter counts 0 ... 255 on the PWM clock and wraps. The output is
high while the counter is below the held compare value, so the duty cycle is
cmp/256: 0 gives a constant low, 255 gives 255/256, 128 (the reset value) gives
50 %. The compare value from the tracker is copied into the held register only
in the cycle where the counter is at 255, so a new value takes effect from the
start of the next period and never changes a period that has begun.

One PWM period is 256 PWM clocks = 512(`pwm_freq`+1) System Clock cycles. The
output is formed combinationally from two registers; register it outside if
the converter's driver needs a glitch-free signal.

## Behaviour in a closed loop, and its limits

`tb_mppt_top` closes the loop around a behavioural model of a harvester behind
a boost converter: a source with open-circuit voltage 1 V and resistance Rs, a
converter input resistance RL(1-D)^2 with RL = 40 ohm, so the MPP is at
D = 1 - sqrt(Rs/RL), and an 8-bit ADC with +/-1 LSB of random noise. With
all RTL parameters at their defaults and `pwm_freq` = 0 or 1, the mean
tracking efficiency (power harvested over power available) in the last quarter
of each phase was:

| source resistance | averaging | efficiency |
|-------------------|-----------|------------|
| 8 ohm             | 32        | 99.5 %     |
| 5 ohm             | 64        | 99.9 %     |
| 12 ohm            | 32        | 97.3 %     |
| 8 ohm             | 8         | 99.4 %     |
| 8 ohm             | 1         | 56.8 %     |

Things a user of this controller should know, all visible in that test:

* **Averaging is not optional with noisy inputs.** With one sample per
  decision, noise on V also appears in P = V x I, so "power up" and "voltage
  up" tend to agree, which the rule turns into "decrease". The duty cycle then
  drifts to 0. With 8 or more samples per window the tracker holds the MPP in
  this model.
* **The tracker can decide faster than the PWM can change.** At the fastest
  tracking clock a window of 1 to 64 samples lasts 2 to 128 System Clock
  cycles, while a PWM period lasts at least 512. Such decisions see an
  unchanged operating point. In practice a big power change asks for the fast
  clock, the following decision sees a small change, and the clock drops again
  within a window or two, so the effect is short. Choose `averaging` and
  `pwm_freq` so that a window at the slowest clock covers several PWM periods.
* **Clock crossing.** `pwm_cmp` is launched by the tracking clock and captured
  by the PWM clock without a synchroniser. Both are flip-flop outputs of the
  same System Clock and the PWM stage only captures at its overflow. In a
  physical implementation both must be constrained as generated clocks of
  System Clock.

## What is taken from the publication and what is not

Taken from the publication:

* the three blocks and their connections, the signal names, the active-low
  reset NRST;
* 8-bit voltage, current, compare value, PWM frequency and PWM counter;
  2-bit Averaging and Clock Request buses;
* averaging of power and voltage over 1, 8, 32 or 64 samples;
* the decision tree's outcomes, the variable step, and a clock request that
  falls to the slowest clock when the power change is near zero;
* the request codes 00/01/10/11 and the ratios 2, 20, 200, 2000 (the flow
  chart prints /1, /10, /100, /1000; the text explains the factor of two);
* counter dividers on the rising edge of System Clock;
* the counter/comparator PWM, the "counter < compare value" rule, the update
  only at overflow, the 50 % reset duty.

This design's own choices:

* the Averaging code mapping (the publication deliberately keeps it private);
* the reading of the decision tests (`CMP_PREV_DIFF`, above);
* the thresholds and step sizes, and using the same |dP| bands for the step
  and the clock request;
* the warm-up windows after reset, the saturation of the compare value;
* the instant the power management applies a new request;
* the mapping of `pwm_freq` to a divider;
* asynchronous reset everywhere, reset request 00.

Not included: the PFM alternative to the PWM stage (named, but not described,
in the publication), and the harvester, converter and ADCs, which are outside
the controller. The publication's results are post-layout power figures of a
130 nm implementation (743 cells); they cannot be reproduced from RTL.
Synthesised without a cell library this RTL has about 120 flip-flop bits.

## Parameters

| Module             | Parameter                    | Default          | Meaning |
|--------------------|------------------------------|------------------|---------|
| `power_management` | `TS_RATIO_0` ... `TS_RATIO_3` | 2, 20, 200, 2000 | tracking clock ratio for Clock Request 00 ... 11 (even, ascending) |
| `power_management` | `PF_W`                       | 8                | width of `pwm_freq` |
| `tracking_system`  | `TH_0`, `TH_1`, `TH_2`       | 4096, 512, 64    | \|dP\| band limits |
| `tracking_system`  | `STEP_0` ... `STEP_3`        | 8, 4, 2, 1       | compare-value step per band |
| `tracking_system`  | `CMP_PREV_DIFF`              | 0                | 1 = decision tests read literally from the flow chart |
| `pwm_generator`    | `CW`, `CMP_RST`              | 8, 128           | counter width, compare value after reset |

`mppt_top` has no parameters; it uses the defaults.

## Simulation

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/mppt_pkg.sv rtl/pwm_generator.sv \
          tb/tb_pwm_generator.sv --top-module tb_pwm_generator -Mdir obj_pwm
obj_pwm/Vtb_pwm_generator

verilator --binary --timing --assert -Irtl -Itb rtl/mppt_pkg.sv rtl/*.sv \
          tb/harvester_model.sv tb/tb_mppt_top.sv --top-module tb_mppt_top -Mdir obj_top
obj_top/Vtb_mppt_top
```

| Testbench             | What it checks |
|-----------------------|----------------|
| `tb_pwm_generator`    | high time per period equals the compare value held; mid-period changes wait for the next period; 0, 1, 255 and random values; reset to 50 %. |
| `tb_power_management` | tracking clock period and high time for each request; when a new request takes effect (high phase and low phase); PWM clock period for several `pwm_freq`. |
| `tb_tracking_system`  | both readings of the decision tests against an integer reference model, cycle by cycle: held outputs during a window and new outputs right after it, for every averaging size; all step sizes, request codes and saturation at both ends must occur. |
| `tb_mppt_top`         | the closed loop above at default parameters (about 86 million System Clock cycles, under a minute): every PWM period's length and high time, every tracking clock period, tracking efficiency of at least 95 % in the phases averaging 32 or 64 samples, and that every request code, step size, both directions, every averaging code, a deferred compare update and two PWM frequencies occurred. |

The testbenches reset through a falling edge of `nrst`, because the resets are
asynchronous. Verilator's two-state simulation starts unreset flops at random
values, so `+verilator+rand+reset+2` is a useful extra run-time option.
