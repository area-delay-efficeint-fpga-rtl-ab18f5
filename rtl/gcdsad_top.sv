// gcdsad_top: Optimized-GCDSAD, a GCD engine for two WIDTH-bit (32) unsigned
// numbers by repeated absolute difference.
//
// Euclid's subtractive rule gcd(a, b) = gcd(|a - b|, min(a, b)) is applied
// once per clock: the SAD block forms |A - B| and the controller writes it
// over the larger of Reg_A and Reg_B, until the two are equal.  The SAD block
// replaces the subtractors and comparator of a conventional two-subtractor
// datapath with one carry generator, two rows of XOR gates and one adder,
// all but the adder built of NAND gates.
//
// Interface: clk, rst (synchronous, active high), go_i, operands a_i and
// b_i, result d_o and done_o.  a_i and b_i are sampled at the clock edge that
// sees go_i high (in S_IDLE or S_DONE); done_o rises k + 2 edges later, k
// being the number of subtraction steps, and d_o then holds gcd(a_i, b_i).
// gcd(0, x) = gcd(x, 0) = x.  The pin list follows the paper's
// (operands, go_i, clk, rst, d_o); done_o is this design's addition.
module gcdsad_top
  import gcd_pkg::*;
#(
  parameter int unsigned WIDTH = GCD_WIDTH
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             go_i,
  input  logic [WIDTH-1:0] a_i,
  input  logic [WIDTH-1:0] b_i,
  output logic [WIDTH-1:0] d_o,
  output logic             done_o
);

  gcd_ctrl_t ctrl;
  gcd_stat_t stat;

  gcd_ctrl u_ctrl (
    .clk    (clk),
    .rst    (rst),
    .go_i   (go_i),
    .stat   (stat),
    .ctrl   (ctrl),
    .done_o (done_o)
  );

  gcd_datapath #(.WIDTH(WIDTH)) u_dp (
    .clk  (clk),
    .rst  (rst),
    .a_i  (a_i),
    .b_i  (b_i),
    .ctrl (ctrl),
    .stat (stat),
    .d_o  (d_o)
  );

endmodule
