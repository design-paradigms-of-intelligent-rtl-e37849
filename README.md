# A pipelined zero-order Takagi-Sugeno fuzzy controller with active-rule selection

This is synthesizable SystemVerilog for a digital fuzzy logic controller (DFLC). It follows the
parameterized FPGA fuzzy processor that K. M. Deliparaschos and S. G. Tzafestas describe in
"Design paradigms of intelligent control systems on a chip". The RTL and its testbenches are an
independent reconstruction from that description. They are not the authors' code.

The controller maps four 12-bit sensor values to one 12-bit control value. It uses a rule base of
7^4 = 2401 fuzzy rules and produces a new result every 16 clocks, 270 ns after the inputs were
sampled at 100 MHz. The main idea is **active-rule selection**. Each input is covered by seven
membership functions, and neighbouring functions overlap in pairs. At any input value, therefore,
at most two functions per input are non-zero, and at most 2^4 = 16 of the 2401 rules can fire.
The hardware finds those 16 rules directly from the input values. It then streams them through a
deep pipeline, one rule per clock, and never looks at the other 2385.

## The inference it computes

Each rule *i* has the form "IF x0 is A0 AND x1 is A1 AND x2 is A2 AND x3 is A3 THEN y = s_i",
where s_i is a constant (a *singleton*: this is the zero-order Takagi-Sugeno form). The controller
computes:

* **Firing strength** w_i: the minimum of the four membership degrees (8 bits each, 0..255). A
  build option replaces the minimum with a renormalised product.
* **Output**: y = sum(w_i * s_i) / sum(w_i) over the active rules. The quotient is truncated
  toward zero.

Rules that are not active have w_i = 0, so the result equals a full evaluation of all 2401 rules.
The testbenches check exactly that: the reference model evaluates every rule of the rule base.

## Membership functions and the knowledge base

The membership functions (MFs) of one input are described by their overlap regions. Region r
lies between MF r and MF r+1 and spans the input interval [L_r, R_r]:

* below L_r, MF r has degree 255;
* inside the region, MF r falls linearly to 0 while MF r+1 rises as its complement, so the two
  degrees always sum to 255;
* above R_r, MF r+1 has degree 255 until the next region starts.

Triangular MFs have R_r = L_{r+1}. Trapezoidal MFs leave a plateau between regions. The falling
degree is `255 - ((x - L_r) * slope_r >> 12)`, with `slope_r = floor(255 * 4096 / (R_r - L_r))`.
Each region is stored as one 40-bit word {L (12 bits), R (12 bits), slope (16 bits)}, so the four
inputs together form a 160-bit bus.

The design needs a concrete knowledge base. This release ships a worked example, defined as
closed-form functions in `rtl/dflc_pkg.sv`:

* MF centres are evenly spaced, at c_j = j * 4095 / 6.
* Inputs 0 and 1 use triangles. Inputs 2 and 3 use trapezoids with a plateau of (c_1 - c_0)/3.
* The singleton of the rule with MF indices (d0, d1, d2, d3) is
  `((2S - Smax) * 1980) / Smax + ((3 d0 + 5 d1 + 7 d2 + 9 d3) mod 13) - 6`, with
  `S = 5 d0 + 3 d1 + 2 d2 + d3` and `Smax = 66`. This keeps every singleton inside ±1986.
* The rule with indices (d0..d3) sits at address d0 + 7 d1 + 49 d2 + 343 d3.

To load another controller, change `mf_left`, `mf_right` and `singleton` in the package. Both
ROMs are computed from these functions at elaboration.

## Datapath

The core (`fpga_fc`) has three parts:

* **Fuzzification**: finds the input regions, looks up the region parameters and computes the
  membership degrees.
* **Inference**: generates the active rules and their firing strengths.
* **Defuzzification**: the two sums and the division.

The blocks are named after the original design's components:

| block | function |
|---|---|
| `ars_p` | active-rule selection: region r_k of each input, found by parallel comparison with the left edges |
| `mf_rom_p` | region word {L, R, slope} for each input's region |
| `trap_gen_p` | degree alpha_k of the first active MF of each input (4 x 8 bits) |
| `addr_gen_p` | 4-bit rule counter; rule j uses MF r_k + bit k of j on input k, and `int_zer` marks rule 0 |
| `cons_map_p` | rule address from the four MF indices (0..2400) |
| `s_rom_p` | 2401 x 12-bit signed singleton ROM |
| `rule_sel_p` | picks alpha_k or 255 - alpha_k for each input, using the counter bits |
| `andor_meth_p` | MIN (or PROD) of the four degrees gives the firing strength |
| `mult` | signed 12-bit singleton x unsigned 8-bit strength, giving a 21-bit product |
| `int_sig`, `int_uns` | 25-bit signed and 12-bit unsigned accumulators; `clear` restarts them with the first rule |
| `div_array` / `div_ppa` | restoring or non-restoring array divider, 25-bit / 12-bit, 12-bit quotient, one internal register |
| `pipe_reg` | every pipeline register (CPR: after a component; PSR: path synchronisation) |

### Pipeline timing

This is the part that most needs care. Let edge E be the clock edge on which the chip's input
register takes a set, and let j = 0..15 number the active rules of that set. The table below
gives the edge at which each register first holds rule j's value. The alpha path changes only
once per set.

| register | content | edge |
|---|---|---|
| R1 (chip) | input set | E |
| PSR1 (3 deep) | inputs and regions for the MF generator | E+3 |
| CPR3 | 4 degrees alpha_k, held for the whole set | E+4 .. E+19 |
| addr_gen_p | rule MF indices, `sel`, `int_zer` | E+1+j |
| CPR1 | same | E+2+j |
| CPR2 | rule address | E+3+j |
| PSR3 / PSR2 (1st stage) | select bits / singleton | E+4+j |
| CPR4 | the 4 selected degrees | E+5+j |
| CPR5, PSR2 (3rd stage) | firing strength, singleton | E+6+j |
| CPR6, int_uns | product; strength sum | E+7+j |
| int_sig | weighted sum | E+8+j |
| CPR7 (2 deep), CPR8 | complete sums of the set | E+24 |
| divider stage | half the divider rows | E+25 |
| CPR9 | quotient | E+26 |
| R2 (chip) | result | E+27 |

The result therefore appears 16 rule clocks plus 11 pipeline clocks after the input was taken:
27 clocks, or 270 ns at 100 MHz. A new set enters every 16 clocks (160 ns). The accumulators
need no separate "done" signal. When rule 0 of the next set arrives with `clear`, the register
still holds the complete sum of the previous set, and CPR7/CPR8 capture it on that edge.

The next set is taken at E+16, and its degrees reach CPR3 at E+20. This is exactly when its
rule 0 reaches the rule selector, and it is why PSR1 is three registers deep. In general the
output follows the input by 2^N_IN + 11 clocks at the default depths.

The table is for the default register depths. The `CPR` parameter (a `cpr_depths_t` struct)
sets the depth of CPR1..CPR6, CPR8 and CPR9, each at least 1. PSR1, PSR2, PSR3 and CPR7 are then
derived by functions in `dflc_pkg`, so that the alpha, rule and sum paths still meet:

* PSR3 = max(1, CPR3 - CPR1 - CPR2);
* PSR1 = 1 + CPR1 + CPR2 + PSR3 - CPR3;
* PSR2 = PSR3 + CPR4 + CPR5;
* CPR7 = CPR6 + CPR8.

`dflc_pkg::core_latency` gives the resulting latency, and `dflc_chip` passes it to the control
logic. For example, the depths {CPR1 2, CPR2 1, CPR3 6, CPR4 2, CPR5 1, CPR6 2, CPR8 3, CPR9 2}
give 35 clocks.

## Chip top and handshake

`dflc_chip` wires up the following parts:

* the clock manager `dcm`;
* the input register R1 and the output register R2;
* the core;
* `control_logic_p`.

The clock manager takes the 75 MHz board clock `clk` and produces two clocks. `clkfx` is the
100 MHz core clock. `clkdv` is the 6.25 MHz sample clock, exactly 1/16 of clkfx and
phase-aligned with it. The clock manager also releases the internal active-low reset once it has
locked.

The control logic runs a modulo-16 counter in the core clock domain. The core's rule counter is
reset together with it.

* `r_in` (ready_in) is high for one clock when R1 is about to take the input set. The data source
  must present the next set by that edge.
* `r_out` (ready_out) is high for one clock after R2 has been loaded. `op` then holds the signed
  12-bit result until the next load.

Concurrent assertions in `control_logic_p` state these strobe rules: each strobe lasts one
clock, and `ready_out` follows every R2 load.

`dcm` is a behavioural model with delays. It stands in for the FPGA's clock macro and is not
synthesizable. In a real implementation it is replaced by the vendor primitive. All other files
are synthesizable.

## Parameters

Parameters of `fpga_fc` and `dflc_chip` (the defaults are the main configuration):

| parameter | default | meaning |
|---|---|---|
| `N_IN` | 4 | inputs; 2^N_IN active rules per set |
| `IN_W` | 12 | input bits |
| `N_MF` | 7 | MFs per input; N_MF^N_IN rules |
| `ALPHA_W` | 8 | degree-of-truth bits |
| `SING_W` | 12 | singleton bits (signed) |
| `OUT_W` | 12 | output bits (signed) |
| `AND_METHOD` | `AND_MIN` | `AND_PROD` for the product connective (core only) |
| `DIV_TYPE` | `DIV_ARRAY` | `DIV_PPA` selects the non-restoring divider (core only) |
| `CPR` | all 1 | depth of each component pipeline register (see Pipeline timing) |

The core has also been run with `N_IN=2, N_MF=9`, which gives two inputs, nine triangular MFs and
81 rules: the size used for a mobile-robot path tracker. In that configuration a result follows
every 4 clocks, with a latency of 4 + 11 clocks. The original tracker build used a shorter,
9-stage pipeline, which is not reproduced here. The knowledge-base functions and the
`mf_margin` rule assume `ALPHA_W = 8`.

## Where this RTL departs from, or goes beyond, the original description

The original description gives the block diagram, the bus widths, the rates and the latency.
The following points are this design's own choices:

* **Singleton width.** The original summary table lists 8-bit consequents. Its block diagram,
  however, shows a 21-bit product of the singleton and an 8-bit strength, and a 25-bit
  numerator. This RTL follows the diagram and uses 12-bit signed singletons.
* **Complementary overlaps.** The diagram carries only one 8-bit degree per input out of the MF
  generator. Here the second degree is taken as 255 minus the first, which is exact for MFs that
  form a partition of unity. Sets of MFs that overlap without summing to full truth are not
  supported.
* **MF encoding.** The {L, R, slope} encoding of the 160-bit parameter word and the example
  knowledge base are this design's own.
* **Register depths.** The original core makes every pipeline depth a parameter but gives no
  values. Here the default depths reproduce the 11-cycle pipeline. The synchronisation registers
  are derived from the component depths rather than set independently, because any other value
  would break the alignment.
* **Reset.** All registers clear asynchronously on the active-low internal reset.
* **Control logic.** It is a counter in the core clock domain instead of logic that samples
  clkdv. It produces single-clock `ready_in`/`ready_out` strobes.
* **Divider.** The original only names its two divider options. Here one is a restoring array and
  the other a non-restoring array, each split by one register.
* **Not included.** The related designs from the same source are not part of this RTL:
  * the "odd-even" variant that processes two rules per clock;
  * the LUT-based MF generator;
  * the FSL bus wrapper and soft-processor system of the robot application;
  * the genetic-algorithm processor.

## Simulating

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and finishes. The testbenches share `tb/tb_check.svh`, and the
core and chip tests use the reference model `tb/dflc_ref_pkg.sv`. Build one with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
    rtl/dflc_pkg.sv tb/dflc_ref_pkg.sv tb/dflc_chip_tb.sv --top-module dflc_chip_tb
./obj_dir/Vdflc_chip_tb
```

Leave out `tb/dflc_ref_pkg.sv` for the unit testbenches that do not import it.

What each of the three main testbenches does:

* **`dflc_chip_tb`** runs the whole chip at its default sizes. It pushes 400 input sets through
  the handshake, including extreme codes and the exact MF edges, and compares every result with
  the full-rule-base model. It checks the 16-clock input period, the 27-clock latency and both
  clock periods. It also counts the mechanisms it exercised (every overlap region selected,
  plateau and edge inputs, results of both signs) and fails if any of them never occurred.
* **`fpga_fc_tb`** runs four builds of the core side by side against the model:
  * the default build;
  * the non-restoring divider;
  * the PROD connective;
  * the 2-input, 9-MF tracker configuration.
  * a build with deeper component registers (35-clock latency).
* **The unit testbenches** check each block against arithmetic written independently in the
  testbench.
