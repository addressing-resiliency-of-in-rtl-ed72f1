# FAME: a fault-tolerant in-memory floating-point adder

This design computes IEEE 754 single-precision addition and subtraction. Its
exponent subtractor, its significand adder and its exponent
increment/decrement run inside RRAM crossbars that
compute logic directly in the memory array. RRAM cells fail: a cell that should be in its high-resistance
state (HRS, "off") can get stuck in its low-resistance state (LRS, "on"). In a
logic array, one such cell silently corrupts a whole product term. The design
therefore adds two repair schemes, each able to keep a defective array
computing correctly at half throughput, plus a built-in test that finds the
defective cells:

* **FTV/FTG** (force to VDD / force to ground) masks defective cells by driving
  their wordlines to a harmless value. The bitlines that hold such cells are
  evaluated in a second cycle.
* **SATO** (shift at the output) never uses a defective group of bitlines.
  Instead it recomputes that group's work on the neighbouring healthy group in
  a second cycle.

The RTL models each crossbar at the logic level: one bit per cell, a defect
map per cell, and a sense-amplifier (SA) latch per bitline. The arithmetic
around the arrays is ordinary synthesizable logic.

## Dynamic computing-in-memory (DCIM) planes

A DCIM array is a programmable logic array (PLA) built from RRAM:

* **Wordlines are inputs.** Every logic input drives two wordlines, its true
  value and its complement.
* **Bitlines are product terms.** A cell programmed LRS connects its wordline
  to its bitline. HRS means "not connected".
* **An AND plane feeds an OR plane.** The bitline values of the AND plane (the
  product terms) become the wordlines of the OR plane, again as true and
  complement lines. Each OR-plane bitline is then a sum of products.

In silicon these are NAND-NAND or NOR-NOR arrays. Here only the logic is
modelled.

* `dcim_and_plane`: a bitline is 1 unless some connected cell sits on a
  wordline at 0.
* `dcim_or_plane`: a bitline is 1 if some connected cell sits on a wordline
  at 1.

**Cell model.** A cell behaves as `prog | stuck`. The `cell_prog` input is the
intended program; `stuck_lrs` is the defect map used for fault injection.

**SA latch.** Each bitline has one, loaded when its `sa_en` is high.

**Timing.** The two planes sense one cycle apart: the AND latches load at the
first edge after the operand arrives, the OR latches at the next edge. This is
the two-step sense-enable chain SE_AND → SE_OR, which starts from a
computing-enable signal.

### Why a stuck-at-LRS cell hurts, and how FTV/FTG masks it

**AND plane.** An extra LRS cell adds its wordline to the product, so the term
is wrongly 0 whenever that wordline is 0. If that wordline is forced to 1, the
extra cell is harmless. Forcing the wordline would, however, disturb every
*other* bitline that really uses it.

**The two-cycle fix.** An operation takes two cycles, marked by a
clock-sequence bit `cs`:

1. `cs = 0`: only the SAs of healthy bitlines latch, with the normal wordlines.
2. `cs = 1`: only the SAs of bitlines flagged faulty latch, while the flagged
   wordlines are forced.

On the AND plane the flagged wordlines are forced to 1 (FTV). On the OR plane
the inputs of defective cells are forced to 0 (FTG), since a 0 input cannot
make an OR true.

Each plane keeps two fault-flag vectors: one bit per bitline (F_B) and one bit
per wordline (F_W).

**The case FTV cannot repair.** Suppose faulty bitline X has a defect on
wordline w, and a different faulty bitline Y really uses w. Forcing w in the
second cycle then destroys Y's own term. `ftv_tester` reports this as
`unfixable`.

### The test (`ftv_tester`)

The test runs bitline by bitline, by brute force:

**Bitline step.** The wordlines of the cells programmed LRS on the bitline get
the non-controlling value (1 for AND, 0 for OR). All other wordlines get the
controlling value. A healthy bitline then reads the non-controlling value; any
extra LRS cell flips it.

**Cell step.** This runs only on a faulty bitline. Each HRS-programmed cell is
tested alone: its wordline gets the controlling value and all others the
non-controlling one. If the bitline follows, that cell is stuck LRS and its
wordline flag is set.

**Duration.** The test takes `N_BL` cycles, plus `N_WL` cycles for each faulty
bitline.

**Departure: how the readings are judged.** The original description gives
the two SA readings in opposite senses. This design judges both steps against
what a defect-free bitline would read, which is the only reading consistent
with AND logic.

**Departure: the OR-plane test.** The OR-plane test is the dual of the AND
test. It is this design's own choice; no OR-plane procedure was specified.

## The sum-of-products unit (`dcim_sop_array`)

This unit contains:

* an AND plane and an OR plane;
* two testers, which run AND first, then OR, on `test_start`;
* the `cs` sequencer;
* a valid/ready handshake.

**Modes.**

| mode | when | throughput | result after acceptance |
|---|---|---|---|
| normal | no fault flag set | 1 operand per cycle | 2 cycles |
| resilient | any flag set | 1 operand per 2 cycles | 3 cycles |

In resilient mode the operand must stay on the inputs for both cycles, so it
is accepted at the edge that ends its `cs = 1` cycle.

**The `adv` output** is high in cycles whose closing edge moves an operand one
stage on. Surrounding pipeline registers advance with it.

**Holding latches.** These are this design's own addition. The OR plane does
not read the AND SA latches directly. It reads a copy, `and_hold`, taken when
the AND plane has finished both of its cycles. The OR result is held the same
way, in `or_hold`. Without these copies the second-cycle latching of one plane
would overlap the first cycle of the other, and a result would change while
the next stage is reading it.

## SATO (`sato_array`)

SATO needs an array built from identical slices. Here that is `N_SET` sets of
`B = 3` bitlines. Each set computes a·b, a·¬b and ¬a·b for its own slice's
inputs: the three product terms of an adder bit. The default is 16 sets with
2 inputs each, giving 64 wordlines and 48 bitlines.

**Normal mode.** When no set is flagged, one operation takes one cycle.

**SATO mode.** When a set is flagged, an operation takes two cycles:

1. Every set computes its own slice. The SA latch row is loaded shifted up by
   one set, so set s+1 holds the result of slice s.
2. A multiplexer on each wordline gives set s the inputs of slice s−1. The
   sets whose lower neighbour is faulty latch again, so the work of the faulty
   set is redone on healthy bitlines.

Slice j is then read from set j+1. Set indices wrap around (the last slice is
recomputed on set 0).

**Limits.**

* Two adjacent faulty sets cannot be repaired, since the neighbour that would
  redo the work is itself faulty. The wrap-around pair counts as adjacent.
  This is reported as `unfixable`.
* No test procedure for SATO was specified, so the faulty-set flags (`f_set`)
  are an input.

## The floating-point pipeline (`fame_fp_addsub`)

The adder has ten stages, with operands advancing on `adv`. Three DCIM
arrays take two stages each. All three are instances of the same adder
(`fp_frac_adder`): an 8-bit one for the exponent difference (`u_ea`), a
27-bit one for the significands (`u_fa`) and an 8-bit one for the exponent
increment/decrement (`u_xa`).

| stage | module | work | register |
|---|---|---|---|
| 1 | `fp_exp_sub` | order operands by magnitude, effective operation, NaN/∞ cases | r1 |
| 2 | `u_ea`, AND plane | exponent difference, product terms of e_big + ¬e_small + 1 | SA latches |
| 3 | `u_ea`, OR plane + carry select | g/p and carries: the exponent difference | e3 |
| 4 | `fp_right_shift` | align the smaller significand by the difference; keep guard, round, sticky bits | a2/b2 |
| 5 | `u_fa`, AND plane | per-bit product terms a·b, a·¬b, ¬a·b | SA latches |
| 6 | `u_fa`, OR plane + carry select | generate g = a·b and propagate p = a·¬b + ¬a·b; 4-bit carry-select adder | r5 |
| 7 | `fp_left_shift` | normalise: right by one on carry-out, else left by the leading-zero count | r6 |
| 8 | `u_xa`, AND plane | product terms of e_big + 0 + 1 (after a right shift) or e_big + ¬lshift + 1 | SA latches |
| 9 | `u_xa`, OR plane + carry select | the adjusted exponent | r8 |
| 10 | `fp_exp_round` | round to nearest even, renormalise, overflow to ∞, flags | output |

Signs, exponents, significands and special-case bits travel in registers
beside the arrays.

**Fraction adder.** The significand datapath is 27 bits wide: the hidden bit,
23 fraction bits and three rounding bits. Subtraction inverts the smaller
operand and adds a carry-in of 1. The larger operand always comes first, so
the difference is never negative.

**Array programs.** The programs of all three arrays are computed from a formula
by constant functions in `fp_frac_adder`:

* product term 3i is a·b of bit i, 3i+1 is a·¬b, and 3i+2 is ¬a·b;
* OR output 2i is g of bit i, and 2i+1 is p.

**Shifts.** The shifts are plain logic. An SA-embedded shift circuit was
intended for them, but its circuit is not available.

**Latency and throughput.**

* Normal mode: 11 cycles of latency, one operation per cycle.
* FTV mode: 21 cycles of latency, one operation per two cycles. The whole
  pipeline runs at the arrays' rate, because every register advances on
  `adv`.
* While an array is being tested, the pipeline stalls and `in_ready` is low.

**Keeping the three arrays in step.** The three arrays must move together.
`dcim_sop_array` therefore has two extra inputs:

* `peer_slow`: another array is in two-cycle mode. This array then uses the
  same two-cycle schedule, with all its SAs enabled in both cycles.
* `peer_busy`: another array is under test. This array then stalls.

Each array's `peer_slow` is the OR of the other two arrays' `resilient`, and
its `peer_busy` the OR of their `test_busy`, so the three arrays share `cs`
and `adv` exactly. An assertion checks this. `test_start` tests all arrays
at once; `test_done` pulses when all have finished.

**Flags.**

* `overflow`: the result rounded to infinity from finite operands.
* `underflow`: the result is subnormal. Since an exact sum of two
  floating-point numbers that is tiny is always exact, the IEEE "tiny and
  inexact" rule would never fire for an adder.
* `inexact`: the result was rounded.
* `invalid`: ∞ − ∞.

A NaN result is the quiet NaN 0x7FC00000.

## Top level (`fame_top`)

The top holds the two schemes side by side:

* the floating-point adder with its three FTV/FTG-protected arrays, on ports
  prefixed `fp_`;
* a SATO-protected array, on ports prefixed `sa_`.

The defect maps of all arrays are ports, so that faults can be injected in
simulation. In a chip they would be the cells' real state.

## How far to trust it, and where it departs

**Modelled at logic level only.** The following are not modelled:

* the RRAM device itself, with its resistance, variation and sense margin;
* the analog sense amplifier;
* the reference-voltage regulator;
* the SA-embedded shift circuit.

**Sizes.**

| unit | size | note |
|---|---|---|
| `dcim_and_plane` / `dcim_or_plane` / `ftv_tester` | 64 wordlines × 32 bitlines | the evaluated array size |
| `sato_array` | 64 wordlines × 48 bitlines | 48 rather than 32 bitlines, because the set size is 3 |
| fraction array | AND plane 108×81, OR plane 162×54 | one pair covering all 27 bits, instead of two 64×64 arrays |
| exponent difference and inc/dec arrays | each AND plane 32×24, OR plane 48×16 | reported as 32×32 and 32×64 each |

The two shifts were also reported as small crossbars. Here they are plain
logic, as are the operand comparison and swap and the rounding increment.

**This design's own choices:**

* the holding latches;
* the handshake;
* the pipeline depth;
* locking the arrays together;
* the OR-plane test;
* the test readings;
* the SATO shift direction and wrap-around;
* round-to-nearest-even;
* the meaning of the underflow flag;
* the carry-select block size (4).

Each is noted in the opening comment of the file concerned.

**Verified by the testbenches.** Each block has a self-checking testbench. The
floating-point results are compared with an exact integer reference model
(`tb/tb_fp_ref_pkg.sv`).

`tb_fame_top` runs the full-size design and checks the following:

* random and edge-case operations;
* corruption while defects are unknown;
* the test, with its stall;
* correct results again in FTV mode;
* an unfixable pattern;
* all SATO modes.

It counts each mechanism and fails if one never occurred.

## Repair rates at realistic defect densities

Two testbenches reproduce the fault-injection experiments at full size. Each
one checks that every healthy part and every repaired part of the array
computes correctly, and prints how much was repaired.

**`tb_sato_fault_workload`.** This testbench puts 11 random stuck-at-LRS cells
into the 64-wordline SATO array. That is a 99.5 % cell yield. Over 200
distributions, about half of the faulty sets are repaired (829 of 1579). This
matches the roughly 50 % reported for SATO. Almost no distribution is repaired
as a whole, because some pair of flagged sets is nearly always adjacent.

**`tb_ftv_fault_workload`.** This testbench puts 30 random stuck-at-LRS cells
into the 64×32 AND plane of a full-size `dcim_sop_array`. The program uses
random two-literal product terms. Only about 41 % of the faulty bitlines are
repaired (95 of 231).

**Departure: FTV repair rate.** The measured 41 % is far below the more than
99 % reported for FTV. At this density about 25 of the 64 wordlines carry a
flag. A two-literal term on a faulty bitline therefore often has one of its
own inputs forced in the second cycle, which is the unfixable case above. The
rule is implemented as described; the higher reported figure must rest on a
sparser fault map or a different program that is not specified. The testbench
checks the rule, not the rate.

## Simulating

All files in `rtl/` plus a testbench, packages first. The testbenches
contain width-truncating assignments (random numbers, all-zero fills of the
large defect maps) that verilator reports as warnings, hence `-Wno-fatal`;
`--assert` turns on the handshake assertions:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
    rtl/fame_pkg.sv tb/tb_fp_ref_pkg.sv $(ls rtl/*.sv | grep -v fame_pkg) \
    tb/tb_fame_top.sv --top-module tb_fame_top
./obj_dir/Vtb_fame_top
```

Every testbench ends by printing `TB_RESULT checks=<n> failures=<n>`. The
block testbenches (`tb/tb_<module>.sv`) build the same way, with their own top
module name.
