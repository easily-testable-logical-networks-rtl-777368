# Widened long flip-flop: automata that test themselves through a back door

A logic network is hard to test when its faults hide behind its state: a
stuck-at fault inside a sequential circuit may only show after a long,
carefully chosen input sequence, and the inputs that would expose it may be
the ones the circuit's users never apply. The design here takes the
opposite route. Every gate of the network, the combinational logic and the
state-holding latches alike, is placed on one long ladder of AND and OR
gates, the *long flip-flop*. The ladder has two ends and four extra
("lateral") inputs. With every ordinary input held at 1, a 1→0→1 step
applied at one end must travel the whole ladder and come out at the other
end; a second run does the same in the opposite direction. If both steps
arrive, the gates along the ladder, and the gates hung off its side, have
shown they can switch. Six test beats on four lateral inputs and two
lateral outputs test the automaton, whatever it computes. This is the "back
door" test: the ordinary inputs and outputs are not needed for it. The
six-beat test of the method IV network misses some faults, but any wrong
output such a fault causes during operation raises the network's ban output.
The method V construction uses a longer, 22-beat back-door test meant to
catch all stuck-at faults; its last step is not built here (section 7).

The price is size. The example automaton below needs 25 gates as an
ordinary network. Built on a widened long flip-flop it needs about a hundred
gates, because every element becomes a stretch of ladder.

All gates are asynchronous direct-current AND/OR gates. There are no
flip-flop primitives and no clock nets in the RTL. State lives in the loops
of the ladder, and the automaton's "clock" is a pair of ordinary two-rail
input signals.

## 1. The long flip-flop

A long flip-flop of length N (module `long_flip_flop`) has three kinds of
gate:

- AND gates 1_1 … 1_N+1, the *chain*;
- OR gates 2_i, each taking the output of 1_i and driving input 1 of 1_i+1;
- OR gates 3_i, each taking the output of 1_i+1 and driving input 2 of 1_i.

So stage i is a loop 1_i → 2_i → 1_i+1 → 3_i → 1_i. Neighbouring loops share
an AND gate, and the N loops overlap into one ladder. The ladder has two end
inputs:

- input 1 of 1_1;
- input 2 of 1_N+1.

It also has two end outputs: the outputs of 1_1 and 1_N+1. Every OR gate
has a second, free input, the *side* input.

With all side inputs at 0 and both end inputs at 1, the ladder has two
stable states: all ones and all zeros. Pull either end input to 0 and the 0
runs through every loop to the far end. Raise the end input again and the
ladder stays at 0, because every loop now holds a 0: it has memorised the
step until a side input at 1 opens a loop again. With the side inputs of
one column at 1, a step instead passes through the ladder and back, which
is what the back-door test uses. A stuck gate on the path stops the step.

A side input at 1 forces its OR gate, and therefore the next chain gate, to
pass the other neighbour's value. This is how the ladder is used for logic:

| module | what it computes | how the side inputs are used |
|---|---|---|
| `lff_or` | y = x_1 ∨ … ∨ x_N | 2-gates forced to 1; x_i on the side of 3_i. The chain then collects OR(x) from the bottom end (held at 0) up to 1_1. |
| `lff_and` | y = x_1 ∧ … ∧ x_N | The dual: chain of OR gates, side gates AND. 2-gates forced to 0; x_i into 3_i; the bottom end is held at 1. |
| `lff_comparator` | are all of x_1 … x_2N equal to 0 (or to 1)? | Odd variables go to the 2-gate sides, even variables inverted to the 3-gate sides. With a1 = 0, a2 = 1, raising a1 makes b1 rise only if every variable is 0. With a2 = 0, a1 = 1, raising a2 makes b2 rise only if every variable is 1. |

The comparator tests itself as a side effect of its job. When the pattern
alternates between 0 and 1, both directions of the step are exercised.

## 2. The widened long flip-flop

`widened_lff` is a long flip-flop with two more columns of AND gates:

- gate 4_i drives the side input of OR 2_i;
- gate 5_i drives the side input of OR 3_i.

Input 1 of every 4-gate is the lateral input **11**. Input 1 of every
5-gate is the lateral input **12**. The remaining inputs of gates 1, 4 and 5
come from the *non-lateral* inputs 6_1 … 6_K. Gates 4 and 5 can also take
inputs from OR outputs elsewhere on the ladder:

- 4_i may read 2_j for j > i (a point further down);
- 5_i may read 3_j for j < i (a point further up).

The other two lateral inputs are the end inputs: **9** (input 1 of 1_1) and
**10** (input 2 of 1_N+1). The lateral outputs are **13** (output of 1_1)
and **14** (output of 1_N+1). The outputs 7_i and 8_i are simply the OR
outputs 2_i and 3_i.

Which of the allowed links exist is given by five bit-mask parameters:

| parameter | bit [i][k] set means |
|---|---|
| `G1X` | input 6_k feeds AND gate 1_i |
| `G4X` | input 6_k feeds 4_i |
| `G5X` | input 6_k feeds 5_i |
| `G4L` | point 7_k feeds 4_i; only k > i is legal |
| `G5L` | point 8_k feeds 5_i; only k < i is legal |

An illegal link in `G4L` or `G5L` stops elaboration with an error.

**The back-door test** (six beats, every non-lateral input at 1):

| beat | 11 | 12 | 9 | 10 | expected |
|---|---|---|---|---|---|
| t1 | 0 | 1 | 1 | 1 | 14 = 1 |
| t2 | 0 | 1 | 0 | 1 | 14 = 0 |
| t3 | 0 | 1 | 1 | 1 | 14 = 1 |
| t4 | 1 | 0 | 1 | 1 | 13 = 1 |
| t5 | 1 | 0 | 1 | 0 | 13 = 0 |
| t6 | 1 | 0 | 1 | 1 | 13 = 1 |

With 11 = 0 all 4-gates are off and the 2-gates follow the chain. With
12 = 1 and every 6_k = 1, each 5-gate simply echoes the 3-gate points above
it. A stuck-at fault on any gate or link stops the step on its way. A 0
wrongly applied to any non-lateral input also spoils the response, so the
test checks its own stimulus as well.

In operation, 11 = 12 = 1, input 6_1 carries a constant 0, and the other
6_k carry the automaton's inputs and clocks.

## 3. Putting an automaton on the ladder

An ordinary network (the *prototype*) is built from two kinds of element:

- AND-OR elements: an OR of AND terms;
- D latches.

Each element becomes a *fragment*, a run of consecutive ladder stages.
Neighbouring fragments share one chain AND gate.
`delta_cfg_pkg` holds one builder function per fragment type; each call sets
the mask bits of its stages:

| builder | element | stages | method |
|---|---|---|---|
| `add_andor_iv` | AND-OR with γ terms; term k on gate 5_m+k−1, output on 8_m | m … m+γ | IV |
| `add_latch_t1` | D latch, output on a 2-gate (7_m+1), loaded while C = 1 | m … m+3 | IV |
| `add_latch_t2` | D latch, output on a 3-gate (8_m+1) | m … m+3 | IV |
| `add_andor_v` | AND-OR with its own zero loop | m … m+γ+1 | V |
| `add_latch_t3`, `add_latch_t4` | D latches with zero loops | m … m+5 | V |

The AND-OR fragment uses the 0 on input 6_1 to hold the chain gate that
separates it from its neighbour at 0, which isolates the fragment. Inside
a latch fragment, one ladder loop holds the stored bit. C and D decide
whether the loop is overwritten or kept.

**Clocking.** The state is held as master/slave pairs:

- masters e1, e2 load the next state while c1 = 1;
- slaves e3, e4 copy the masters while c2 = 1.

One automaton beat is a c1 pulse followed by a c2 pulse; the two are never 1
together. Every signal is two-rail: x1/~x1, x2/~x2, c1/~c1, c2/~c2. The
complement of every variable is therefore available as an ordinary input,
and no inverters are needed.

**The example automaton** has one state bit q1, carried two-rail as
(q1, q2):

    next state   f1 = ~x1 · x2 · ~q1        (q1' = f1, q2' = ~f1)
    outputs      y1 = q1
                 y2 = f3 = f1 + x1·x2
    ban output   y3 = f3·f4 + q1·q2,  f4 = ~f3
                 (0 while every rail pair is complementary)

### Network 1 (method IV, `network1`, N = 22, K = 9)

Inputs 6_1 … 6_9 = 0, ~c1, c1, ~x2, x2, ~x1, x1, ~c2, c2.

| element | fragment | stages |
|---|---|---|
| e3, e4 (slaves) | latch, output on a 3-gate | 1–4, 4–7 |
| e5: f1 | AND-OR, 1 term | 7–8 |
| e6: f2 | AND-OR, 3 terms | 8–11 |
| e7: f3 | AND-OR, 2 terms | 11–13 |
| e8: f4 | AND-OR, 2 terms | 13–15 |
| e9: y3 | AND-OR, 2 terms | 15–17 |
| e1, e2 (masters) | latch, output on a 2-gate | 17–20, 20–23 |

The outputs are y1 = 8_2, y2 = 8_11 and y3 = 8_15. The ban output y3 turns
1 whenever a rail pair stops being complementary, whether a wrong input
symbol or a fault inside the network broke it. Network 1 therefore reports
some faults while it runs, as well as through the back-door test.

### Network 2 (method V, `network2`, N = 29, K = 9)

Method V allows only two-input chain gates, so the chain can no longer take
the constant 0 on a third input. Instead, every fragment carries one extra
ladder loop, its *zero loop*. The zero loop is parked in its all-zero state
at start-up and then supplies the 0 that isolates the fragment.

Start-up:

1. Hold 6_1 = 0 and lateral inputs 9 … 12 at 0 until the network settles.
   Every loop falls to 0, so 13 = 14 = 0.
2. Raise 9 … 12 to 1.
3. Run one beat to load the state.

The ban element and y3 are dropped, because the prototype for method V does
not need them. The layout is:

| element | stages |
|---|---|
| e3 | 1–6 |
| e4 | 6–11 |
| e5 | 11–13 |
| e6 | 13–17 |
| e7 | 17–20 |
| e1 | 20–25 |
| e2 | 25–30 |

The outputs are y1 = 8_4 and y2 = 8_17.

## 4. The top level, `lff_testchip`

The top holds both networks and the three function units:

- Both networks see the same x and clock rails, so their y1 and y2 must agree
  beat by beat once loaded.
- Each network keeps its own lateral pins, bundled in the structs
  `lateral_in_t` (6_1, 9, 10, 11, 12) and `lateral_out_t` (13, 14) from
  `delta_cfg_pkg`. Either network can be tested or started up on its own.
- The function units are `lff_and`, `lff_or` and `lff_comparator`, all with
  `FN = 8`.

The top has no clock, no reset and no flip-flops. The state of the two
automata is entirely in ladder loops.

## 5. Timing and simulation

Every gate is written as `assign #(TD)` with `TD = 1` time unit. Synthesis
ignores the delay. In simulation it is necessary: a zero-delay model of a
ring of gates either oscillates or fails to converge, whereas with a unit
delay each loop settles to one of its stable states as real gates would.
Practical settling times at TD = 1:

- about 2·N gate delays for a full end-to-end step;
- the testbenches wait 100–200 units after every input change;
- a beat of the networks takes 1000 units.

No storage is reset. Simulators that start variables at random values are
fine, because every procedure above first drives the loops into a known
state: the clearing beat for network 1 and the t0 zero state for network 2.

Simulate with plain Verilator, for example:

    verilator --binary --timing -Wno-fatal -y rtl +libext+.sv \
        rtl/delta_cfg_pkg.sv tb/tb_lff_testchip.sv --top-module tb_lff_testchip
    ./obj_dir/Vtb_lff_testchip

Each testbench prints `TB_RESULT checks=… failures=…`.

Lint reports two kinds of warning:

- Combinational loops (UNOPTFLAT). These are the storage of the design, not
  mistakes.
- Unused signals. These are the ladder points 7_i and 8_i that are internal
  links only.

## 6. Testbenches

| testbench | what it checks |
|---|---|
| `tb_long_flip_flop` | Ladder states, end-to-end relay of steps in both directions, memorisation, side inputs. |
| `tb_lff_and`, `tb_lff_or` | All-0, all-1, one-hot, one-cold and random vectors against the reduction operators. |
| `tb_lff_comparator` | Both intervals for many vectors. Exactly the all-0 and all-1 vectors must match. |
| `tb_widened_lff` | A small hand-configured network: side links, lateral gating, the back-door test, link effects. |
| `tb_network1`, `tb_network2` | Hundreds of random beats against the automaton's equations (y1, y2, y1 held over the c1 pulse, y3 = 0), directed set/clear, the back-door test, each of the nine single stimulus errors, then a return to operation. `tb_network1` also breaks an input rail pair and expects y3 = 1; `tb_network2` checks the t0 zero state. |
| `tb_lff_testchip` | All of the above at once at the top level's default size. It counts every mechanism: set, clear, hold, both causes of y2 = 1, ban output quiet and raised, zero-state start-up, back-door pass and stimulus errors for each network, AND/OR true and false, comparator hit and miss. It fails any mechanism that never happened. |

## 7. Where this RTL departs from, or goes beyond, the source description

- **Link direction.** The formal definition of the widened ladder lets 4_i
  read 3-gate outputs and 5_i read 2-gate outputs. The construction methods
  and every fragment drawing use 2 → 4 and 3 → 5 links. The RTL follows the
  construction methods.
- **Lateral pins 9 and 13.** The formal definition puts input 9 and
  output 13 on gate 1_N; the drawings and the test use gate 1_1. The RTL
  uses 1_1.
- **Which latch drawing goes with which element.** The text and the figure
  captions disagree on whether the latch with a 2-gate output serves
  e1/e2 or e3/e4. The whole-network drawing is followed: masters e1/e2 on
  2-gates, slaves e3/e4 on 3-gates.
- **One gate list.** One listed gate of element e8 reads "4_13, 4_15". It is
  taken as 4_13, 4_14, matching the fragment's shape and its neighbours.
- **Method V is not complete.** The last step of method V replaces every
  group-4 and group-5 AND gate with small systems of long flip-flops, so
  that even those gates are tested through the ladder. That step is not
  built: its drawing and the control signals it needs are not given in
  enough detail. Groups 4 and 5 remain plain AND gates in `network2`.
  Everything else in network 2 is built and tested.
- **Gate counts.** The published counts are 124 gates for network 1 and
  272 for network 2. The RTL has:
  - network 1: 23 + 44 + 44 = 111 gates;
  - network 2: 30 + 58 + 58 = 146 gates, smaller mainly because of the
    missing step above.

  How the published counts were made is not stated.
- **Function-unit wiring.** The AND, OR and comparator units take their gate
  types and the places of their inputs and constants from the drawings.
  Where a wire's destination is not readable, the connection that gives the
  stated function was chosen. The comparator uses the canonical ladder with
  the even variables inverted. Its drawing's column arrangement is
  different, but the function is the same.
- **Sizes and packaging.** N = 8 for the function units, the mask-parameter
  style, the package of fragment builders, the unit gate delay and the
  combined top level are all choices of this implementation.
