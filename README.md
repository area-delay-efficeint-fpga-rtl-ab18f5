# Optimized-GCDSAD: a 32-bit Euclid GCD engine built around an absolute-difference unit

This is synthesizable SystemVerilog for a small GCD engine that computes the
greatest common divisor of two 32-bit unsigned integers with the subtractive
form of Euclid's algorithm,

    gcd(a, b) = a                if a = b
              = gcd(a - b, b)    if a > b
              = gcd(a, b - a)    if a < b

one step per clock cycle.  What distinguishes it from the textbook
controller/datapath GCD (two subtractors, a comparator and two muxes) is that
one **sum-of-absolute-difference (SAD) unit** does the work of the
subtractors and the comparator: it finds which operand is smaller, forms
|A - B|, and says whether A = B.  Its decision logic (carry generator and the
operand-inverting XOR gates) is written entirely in NAND gates, which is the
"optimized" part of the name.  The design comes from a published FPGA study
of this architecture (Nabipour, Gholizade and Nabipour, *Area-Delay-Efficient
FPGA Design of 32-bit Euclid's GCD based on Sum of Absolute Difference*); the
RTL here is an independent rendering of it, and the places where it had to
fill gaps or departs from the description are listed below.

## Block structure

```
            a_i        b_i
             |          |
   +------>MUX_A      MUX_B<------+        xsel / ysel  (0: input, 1: |A-B|)
   |         |          |         |
   |       Reg_A      Reg_B       |        xld / yld
   |         |          |         |
   |         +---> SAD <+         |
   |            |  |  |           |
   +------------+  |  +-- eq (NOR of the result)
      |A - B|      +----- a_gt_b (carry)          --> controller
                   Reg <-- Reg_A (or Reg_B if Reg_A = 0)  enable
                    |
                   d_o
```

| file | module | role |
|---|---|---|
| `rtl/gcd_pkg.sv` | package | command/status structs, FSM state type, NAND helper functions |
| `rtl/carry_gen_nand.sv` | `carry_gen_nand` | NAND-only look-ahead carry of A + not(B), i.e. A > B |
| `rtl/sad_unit.sv` | `sad_unit` | SAD block: carry generator, NAND XOR rows, adder, zero NOR |
| `rtl/gcd_datapath.sv` | `gcd_datapath` | MUX_A, MUX_B, Reg_A, Reg_B, SAD, result register |
| `rtl/gcd_ctrl.sv` | `gcd_ctrl` | controller FSM |
| `rtl/gcdsad_top.sv` | `gcdsad_top` | top level: controller + datapath |

All modules with a width take `WIDTH` (default 32, from `gcd_pkg::GCD_WIDTH`).

## How the SAD unit finds |A - B|

This is the heart of the design and the least obvious part.

**Which operand is smaller.**  With a carry-in of 0, A + not(B) =
A - B - 1 + 2^n.  It carries out of bit n-1 exactly when A - B - 1 >= 0,
that is when **A > B**.  The unit does not compute that sum; it only
computes its carry with the generate/propagate half of a carry look-ahead
adder.  Per bit, with NB = not B:

    P = NB OR A  = (NB NAND NB) NAND (A NAND A)
    G = NB AND A = (NB NAND A) NAND (NB NAND A)

and four neighbours (3 the most significant) merge into a group:

    P4 = P3 AND P2 AND P1 AND P0                  (NAND4, then a NAND inverter)
    G4 = NAND( NOT G3, NAND(G2,P3), NAND(G1,P3,P2), NAND(G0,P3,P2,P1) )

The published equations stop at 16 bits (one merge of four 4-bit groups).
For 32 bits, `carry_gen_nand` applies the same 4-way merge recursively:
32 bits -> 8 groups -> 2 groups -> 1, padding the last level with neutral
entries (P = 1, G = 0).  Any `WIDTH` works; the depth is
3 + 2 * ceil(log4(WIDTH)) NAND levels.  The carry is the generate term of the
top group.

**Inverting the smaller operand.**  Each operand bit passes through an XOR
made of four NANDs, `x XOR y = (x NAND (x NAND y)) NAND ((x NAND y) NAND y)`.
B is XORed with the carry and A with the inverted carry, so the pair
becomes (A, not B) when A > B and (not A, B) otherwise.  Either way the two
terms add up to 2^n - 1 + |A - B|.

**The adder.**  Adding the pair with a carry-in of 1 gives 2^n + |A - B|,
whose low n bits are |A - B|.  When A = B the carry is 0, A is inverted, and
not A + A + 1 = 0.  A NOR over the n result bits therefore flags equality.

## Controller and timing

`gcd_ctrl` has three states:

* `S_IDLE` (after reset) and `S_DONE` wait for `go_i`.  The clock edge that
  sees `go_i` high loads Reg_A <- `a_i` and Reg_B <- `b_i` and moves to
  `S_CALC`.
* `S_CALC`: if Reg_A = Reg_B, or either is zero, the result register is
  loaded and the FSM moves to `S_DONE`.  Otherwise the larger register is
  overwritten with |A - B| (Reg_A when `a_gt_b`, else Reg_B).
* `S_DONE` drives `done_o` high; `d_o` holds the result until the next
  operation completes.  A new `go_i` may be given here.

With k subtraction steps, `done_o` rises **k + 2 clock edges** after the edge
that sampled `go_i` (1 load + k steps + 1 result load).  k is the sum of the
quotients of the remainder form of Euclid's algorithm, minus one; it is 0
when an operand is zero.  It is small for most pairs (consecutive Fibonacci
numbers below 2^32 need 47 steps) but grows with the ratio of the operands:
gcd(2^32 - 1, 1) takes 2^32 - 2 steps.  The engine is a subtractive GCD,
not a division-based one, so that worst case is inherent.

`rst` is synchronous and active high; it clears Reg_A, Reg_B, the result
register and returns the FSM to `S_IDLE`, also in mid-computation.

Two assertions in `gcd_ctrl` state the command rules: the two muxes never
both select the feedback path, and the result load never coincides with an
operand load.

## Interface of `gcdsad_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock, rising edge |
| `rst` | in | 1 | synchronous reset, active high |
| `go_i` | in | 1 | start; operands sampled on this edge |
| `a_i`, `b_i` | in | WIDTH | operands |
| `d_o` | out | WIDTH | gcd(a_i, b_i) of the last completed operation |
| `done_o` | out | 1 | high while a result is held (state `S_DONE`) |

## Where this RTL departs from, or adds to, the published description

* **Meaning of the carry.**  The published text says a carry means B > A and
  accordingly feeds the carry to A's XOR and its inverse to B's.  The carry
  of A + not(B) actually means A > B; followed literally, the text would
  invert the larger operand.  Here the carry goes to B's XOR, so the smaller
  operand is inverted, which is what the algorithm needs.
* **32-bit carry tree.**  The published NAND equations cover 16 bits; the
  third look-ahead level is this design's extension (see above).  One printed
  generate term has an index typo; the standard look-ahead term is used.
* **Adder.**  The description shows an adder producing |A - B| but does not
  say how the 2^n - 1 offset is removed or how the adder is built.  Here it is
  a behavioural `+` with a carry-in of 1, left for synthesis to map (on an
  FPGA, the carry chain).  Only the carry generator and the XOR rows are
  NAND-structured.
* **Controller.**  Only the controller's signal names (xsel, ysel, xld, yld,
  enable, go_i) are taken from the published block diagram, which lists seven
  states without transitions.  The three-state FSM, one step per clock, and
  sampling the operands on the `go_i` edge are this design's own.
* **`done_o`.**  The published pin count (three 32-bit buses plus go, clock
  and reset) implies no completion output.  `done_o` is added.
* **Zero operands.**  Euclid's subtractive loop assumes positive operands and
  never ends when one is zero.  The datapath adds Reg_A = 0 / Reg_B = 0 flags
  and returns the other operand, so gcd(0, x) = x and gcd(0, 0) = 0.
* **Resource figures.**  The published FPGA results (107 slice registers and
  156 LUTs on a Virtex-7 for the 32-bit design, a minimum period of 3.2 ns)
  are not reproduced here.  This RTL holds 3 x 32 data flip-flops plus the
  state of a 3-state FSM (2 bits as written).  The published count of 107
  suggests a larger controller.

## Verification

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog:

* `carry_gen_nand_tb`: 32-bit, 16-bit and 5-bit instances.  It uses corner
  pairs, pairs that differ in a single bit (one per bit position), random
  pairs, and all 5-bit pairs, each checked against A > B.
* `sad_unit_tb`: |A - B|, A > B and A = B for corner, random, equal and
  near-equal pairs.
* `gcd_datapath_tb`: drives the command struct directly, including steps that
  rewrite the smaller register, against a register-level model.
* `gcd_ctrl_tb`: closes the loop with a behavioural datapath.  It checks every
  command, the k + 2 latency, and that a mid-computation reset returns to idle.
* `gcdsad_top_tb`: end to end at the default width of 32.  It runs directed
  pairs (Fibonacci pair, all-ones, powers of two, zero operands) and 400
  random pairs with a common factor.  It checks each result against the
  remainder-form GCD and each latency against k + 2.  It also counts the
  mechanisms: A-steps, B-steps, termination on equality, termination on a
  zero operand, restart from `S_DONE`, and a mid-computation reset.  It
  fails if any of them never occurs.

To run one with Verilator (from the directory holding `rtl/` and `tb/`):

    verilator --binary --timing --assert -Irtl -y rtl rtl/gcd_pkg.sv \
        tb/gcdsad_top_tb.sv --top-module gcdsad_top_tb -o sim
    ./obj_dir/sim

Substitute any other testbench name.  All of them finish in seconds.

## Changing the width

`WIDTH` can be set on `gcdsad_top` (and passes down).  The carry tree
resizes itself.  The testbenches that check 32-bit arithmetic assume the
default.
