# A bit-serial fuzzy inference engine

This RTL evaluates a whole rule base of fuzzy rules in parallel, with each rule handled one bit
at a time. A rule has the form "if x is A_i then z is C_i". An optional second antecedent gives
"if x is A_i and y is B_i then z is C_i". Given an observed fuzzy set A' (and B'), the engine
produces the fuzzy conclusion C' by Zadeh's compositional rule of inference:

    alpha_i = max_x min(A'(x), A_i(x))          degree to which the observation matches A_i
    w_i     = min(alpha_i^A, alpha_i^B)         rule weight (w_i = alpha_i with one antecedent)
    C'(z)   = max_i min(w_i, C_i(z))            every conclusion clipped at its weight, then united

Each rule is evaluated by the same small circuit: a pair of bit-serial MIN/MAX elements and a
4-bit shift register. The rule base sits in on-chip ROM next to these circuits. Adding a rule
adds one data path and, for every doubling of the rule count, one level to a binary tree of
MAX elements. The time per inference grows only by that one cycle of tree latency.

The default parameters reproduce the configuration of the published chip:

- 16 rules with one antecedent each;
- 31 elements per fuzzy set;
- 4-bit membership grades (0 = no membership, 15 = full membership).

One inference then takes 256 clock cycles.

## Data format

A fuzzy set is a list of `N_ELEM` grades, one for each element of a discrete universe.
Grades have `GRADE_BITS` bits each. Sets travel as a single bit stream: element 1 first, and
within each grade the most significant bit first. With the defaults, one set is
31 × 4 = 124 bits long.

The observation enters this way on `obs`, and the conclusion leaves the same way on `c_out`.

The rule base is stored in two ROMs, one for the antecedents and one for the conclusions. Both
use the same layout. The ROM word at address `a` holds one bit of every rule at once:

- the element is `a / GRADE_BITS`;
- the bit is `GRADE_BITS-1 - a % GRADE_BITS`, so the MSB comes first.

So a counter that steps through the addresses streams every rule in parallel, and each rule
serially. Antecedent `k` of rule `i` sits at bit `i*N_ANT + k` of the antecedent ROM. Rule `i`
of the conclusion ROM sits at bit `i`.

## Comparing numbers one bit at a time

The core idea is that min and max of two unsigned numbers can be computed from an MSB-first
stream with no delay and one bit of state (`bs_min.sv`, `bs_max.sv`):

- While all bits seen so far are equal, the output bit is that common bit.
- At the first bit where the inputs differ, the input carrying the 0 is the smaller. MIN
  remembers it and passes that input through for the rest of the word. MAX does the same with
  the input carrying the 1.
- A strobe `ws` ("word start") on the first bit of each word clears the decision.

The controller drives `ws` once every `GRADE_BITS` cycles. The elements have no other reset.
Outside the data phases the controller holds `ws` high.

## One rule: the recirculating maximum

`rule_datapath.sv` holds one rule. For each antecedent it has this loop:

    obs bit ──┐
              MIN ── MAX ── SREG (GRADE_BITS cells) ──┬──> alpha stream
    A_i bit ──┘      ^                                │
                     └────────────────────────────────┘

The shift register is exactly one grade long. A word written into it therefore comes out one
word later, in step with the next element's grade.

- In every cycle of the antecedent phase, MAX compares the new `min(A'(x), A_i(x))` with the
  best value so far and writes the larger value back. This happens bit by bit.
- After the last element, the register holds `alpha_i`. It is cleared by reset, so the running
  maximum starts at 0.
- During the conclusion phase the observation input is forced to 0 (`ante_en` low). Since
  min(0, ·) = 0 and max(0, a) = a, `alpha_i` keeps circulating unchanged and leaves the register
  once per word.

The alpha streams then pass through further MIN elements:

- With two antecedents, a MIN combines them into `w_i`. More antecedents form a chain of MINs.
- A last MIN clips the conclusion stream `C_i(z)` at `w_i`.
- A register stores the result bit.

## Uniting the rules: the max tree

`max_tree.sv` merges the `N_RULES` clipped conclusions with a binary tree of `bs_max` elements.
Every node registers its output. As a result the tree has a latency of `ceil(log2 N_RULES)`
cycles, 4 for 16 rules.

The word strobe travels down a delay line next to the data, so each level restarts its
comparison on its own word boundary. If the rule count is not a power of two, the tree is
padded with constant-0 leaves.

`inference_processor.sv` is the array of rule data paths plus the tree.

## Controller and schedule

`fis_controller.sv` has two address counters: one for the antecedent ROM and one for the
conclusion ROM. The conclusion counter starts in the cycle after the antecedent counter ends.
The controller also drives the element strobe `ws` and delays the "conclusion phase" flag to
form `c_valid` and `c_start`.

An inference starts with a one-cycle synchronous `rst`. The table counts that reset cycle as
cycle 1; `D = N_ELEM*GRADE_BITS` (124) and `L = 2 + ceil(log2 N_RULES)` (6).

| cycle (default)   | general               | what happens                                         |
|-------------------|-----------------------|------------------------------------------------------|
| 1                 | 1                     | `rst` high; every register of the engine is cleared  |
| 2                 | 2                     | wait                                                 |
| 3 .. 126          | 3 .. D+2              | observation bits on `obs`; antecedent ROM read       |
| 127 .. 250        | D+3 .. 2D+2           | conclusion ROM read; rules clip and merge            |
| 133               | D+3+L                 | first bit of C' on `c_out`, `c_start` high           |
| 133 .. 256        | D+3+L .. 2D+2+L       | `c_valid` high, C' on `c_out`                        |
| 257               |                       | next `rst` may come                                  |

The six cycles between the conclusion phase and the output are made up as follows:

- 1 cycle in the rule output register;
- 4 cycles in the tree levels;
- 1 cycle in the output register.

These were chosen so that the result appears on cycle 133 and one inference fills exactly
256 cycles, which are the figures reported for the chip. At 20.8 MHz that is about 81,000
inferences per second.

`obs` is ignored outside cycles 3..D+2. After the conclusion phase the controller stays idle
until the next reset.

## Files and parameters

| file                        | contents                                                                     |
|-----------------------------|------------------------------------------------------------------------------|
| `rtl/fuzzy_pkg.sv`          | default sizes, the phase type, the rule-set function                         |
| `rtl/bs_min.sv`, `bs_max.sv`| bit-serial MIN and MAX elements                                              |
| `rtl/shift_reg.sv`          | the per-antecedent shift register                                            |
| `rtl/rule_datapath.sv`      | one rule                                                                     |
| `rtl/max_tree.sv`           | binary MAX tree                                                              |
| `rtl/inference_processor.sv`| all rules + tree                                                             |
| `rtl/ante_rom.sv`, `cons_rom.sv` | antecedent and conclusion ROMs                                          |
| `rtl/fis_controller.sv`     | counters, strobes, valid/start                                               |
| `rtl/fuzzy_engine.sv`       | top level                                                                    |

The top level `fuzzy_engine` takes these parameters:

| parameter      | default | meaning |
|----------------|---------|---------|
| `N_RULES`      | 16      | rules, i.e. data paths |
| `N_ANT`        | 1       | antecedents per rule. 2 gives the A/B data path. |
| `N_ELEM`       | 31      | elements per fuzzy set |
| `GRADE_BITS`   | 4       | bits per grade; also the shift-register length and the strobe period |
| `RULESET_SEED` | 0       | rule base stored in the ROMs |

Its ports are `clk`, `rst`, `obs[N_ANT-1:0]`, `c_out`, `c_valid` and `c_start`.

## The stored rule base

The ROM contents are computed when the design is elaborated by `fuzzy_pkg::rule_grade`. No
data file is used.

With `RULESET_SEED = 0`, rule `r` (0..15) has these sets:

- `A_r` is a triangle that peaks at grade 15 on element `2r` and falls by 4 grades per element:
  15, 11, 7, 3, 0.
- `B_r` (if present) peaks at element `30-2r`.
- `C_r` peaks at element `30-2r`.

For other rule counts the peaks are spread evenly over the universe. This rule base is an
inverse-acting controller: a large input gives a small output. It is only a readable example.

Any other seed gives pseudo-random triangles, with a centre anywhere and a slope of 1 to 8 per
element. To store your own rule base, change `rule_grade` or replace the constant image in the
two ROM modules.

## Where this RTL departs from the original chip

- **Clocking.** The chip used a two-phase non-overlapping clock supplied from off chip. This RTL
  uses one rising-edge clock and a synchronous reset. Pads and package are left out; the top's
  ports stand in for them.
- **Pipeline.** The cycle numbers 3, 133 and 256 are those of the chip. How the 6 cycles of
  latency are split between registers is this design's choice, as is the internal circuit of the
  MIN/MAX elements.
- **Response time and rule count.** The original description says the response time does
  not depend on the number of rules. Here every tree level is registered, so each doubling of
  `N_RULES` delays the output by one cycle: 32 rules put the first output bit on cycle 134.
  The throughput per rule stays the same.
- **Output signals.** The chip signals the start of valid output. `c_start` does that, and the
  level signal `c_valid` is an addition.
- **Antecedents.** The chip held one antecedent per rule. The general data path has two (A and B),
  and the `N_ANT` parameter selects between them.
- **Universe size.** A universe of 32 or 64 elements was also considered in the original
  description. The default here is the chip's 31.
- **Rule contents.** No rule contents are published. The stored rule base is this design's
  example.

## Verification

Every module has a self-checking testbench in `tb/`:

- Each computes the expected values directly on integers.
- Each ends with a `TB_RESULT checks=N failures=M` line.
- Each has a watchdog.

| testbench                       | what it covers |
|---------------------------------|----------------|
| `tb_bs_min`, `tb_bs_max`        | every pair of 4-bit numbers, plus random 8-bit words back to back |
| `tb_shift_reg`                  | delay and parallel view of 4- and 6-bit registers |
| `tb_rule_datapath`              | alpha and clipped conclusion for random sets, one and two antecedents |
| `tb_max_tree`                   | 16- and 5-input trees, result and latency |
| `tb_inference_processor`        | 16 rules × 1 antecedent and 5 rules × 2 antecedents; alphas, C' and latency |
| `tb_ante_rom`, `tb_cons_rom`    | every ROM bit against the triangles written out by hand |
| `tb_fis_controller`             | the full cycle schedule of two inferences |
| `tb_fuzzy_engine`               | the default engine end to end (see below) |
| `tb_fuzzy_engine_variants`      | the whole engine at other sizes (see below) |

`tb_fuzzy_engine` runs 26 back-to-back inferences with crisp, triangular, random and empty
observations. It checks every output grade and the exact cycles of `c_start` and `c_valid`. It
also counts how often rules were clipped, matched fully, merged or did not fire.

`tb_fuzzy_engine_variants` runs the whole engine (through `tb/engine_runner.sv`) in six other
configurations:

- 2 rules with two antecedents;
- 16 rules with two antecedents and a random rule base;
- 32 and 64 elements;
- 5-bit grades;
- 32 rules.

To run a testbench with Verilator:

    verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
        rtl/fuzzy_pkg.sv tb/tb_fuzzy_engine.sv --top-module tb_fuzzy_engine
    ./obj_dir/Vtb_fuzzy_engine

The top level includes a concurrent assertion: the word boundary leaving the tree must line up
with `c_start`.

## Limits

- The functional results are only as good as the reference model in the testbenches, which
  implements the equations at the top of this document on integers.
- Nothing here checks the timing of the 2.5 µm chip, its two-phase clocking or its layout.
- Rules can only combine antecedents with MIN (AND). Rules with negated or OR-ed antecedents
  must be precomputed into one stored fuzzy set.
