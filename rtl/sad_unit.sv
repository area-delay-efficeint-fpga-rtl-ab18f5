// sad_unit: absolute difference |A - B| of two unsigned words (the SAD block).
//
// How it works:
//  1. carry_gen_nand tells whether A + not(B) carries out, i.e. whether A > B.
//  2. The smaller operand is inverted by an XOR gate per bit, each XOR made of
//     four NAND gates: B is XORed with the carry and A with the inverted
//     carry.  When A > B the pair becomes (A, not B), otherwise (not A, B).
//  3. The adder sums the pair with a carry-in of 1.  The pair sums to
//     2^WIDTH - 1 + |A - B|, so with the extra 1 the low WIDTH bits are
//     exactly |A - B| (0 when A == B, since then A is the one inverted).
//  4. A WIDTH-input NOR over the result flags A == B.
// Steps 1, 2 and 4 and the NAND form follow the paper.  The paper's text and
// figure say a carry means B > A and feed the carry to A's XOR; the carry of
// A + not(B) in fact means A > B, so here the carry goes to B's XOR, which
// inverts the smaller operand as the paper intends.  The carry-in of 1 of the
// adder (the paper draws the adder but does not describe it) and its plain
// '+' form are this design's choices.
//
// Interface: combinational; a, b in; abs_o, a_gt_b (the carry), eq out.
module sad_unit
  import gcd_pkg::*;
#(
  parameter int unsigned WIDTH = GCD_WIDTH
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  output logic [WIDTH-1:0] abs_o,
  output logic             a_gt_b,
  output logic             eq
);

  logic             carry, carry_n;
  logic [WIDTH-1:0] ax, bx;

  carry_gen_nand #(.WIDTH(WIDTH)) u_carry (
    .a     (a),
    .b     (b),
    .carry (carry)
  );

  assign carry_n = nand2(carry, carry);

  for (genvar i = 0; i < WIDTH; i++) begin : g_xor
    assign ax[i] = nand_xor(a[i], carry_n);  // inverts A when A <= B
    assign bx[i] = nand_xor(b[i], carry);    // inverts B when A > B
  end

  assign abs_o  = ax + bx + WIDTH'(1);
  assign a_gt_b = carry;
  assign eq     = ~|abs_o;

endmodule
