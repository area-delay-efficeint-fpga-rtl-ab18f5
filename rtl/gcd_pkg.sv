// gcd_pkg: types and gate helpers shared by the Optimized-GCDSAD design.
//
// The NAND helpers are the only gates the carry generator and the operand
// inverters are built from, following the NAND-only rewrite of AND, OR, NOT
// and XOR that the design is named for (see nand_xor below for the XOR form).
// gcd_ctrl_t is the bundle of datapath commands driven by the controller;
// the names xsel, ysel, xld, yld and enable are those of the classic
// controller/datapath GCD block diagram.  gcd_stat_t is what the datapath
// reports back.  The zero flags and the encoding of the states are this
// design's own choice.
package gcd_pkg;

  parameter int unsigned GCD_WIDTH = 32;  // operand width of the design

  // Datapath commands from the controller.
  typedef struct packed {
    logic xsel;    // MUX_A: 0 = external operand A, 1 = SAD result
    logic ysel;    // MUX_B: 0 = external operand B, 1 = SAD result
    logic xld;     // load Reg_A
    logic yld;     // load Reg_B
    logic enable;  // load the result register Reg
  } gcd_ctrl_t;

  // Comparison status from the datapath to the controller.
  typedef struct packed {
    logic a_gt_b;  // carry of the carry generator: Reg_A > Reg_B
    logic eq;      // NOR over the SAD output: Reg_A == Reg_B
    logic a_zero;  // Reg_A == 0
    logic b_zero;  // Reg_B == 0
  } gcd_stat_t;

  typedef enum logic [1:0] {
    S_IDLE = 2'd0,  // after reset: waiting for go_i
    S_CALC = 2'd1,  // one absolute-difference step per cycle
    S_DONE = 2'd2   // result held in d_o, waiting for the next go_i
  } gcd_state_t;

  function automatic logic nand2(input logic x, input logic y);
    return ~(x & y);
  endfunction

  function automatic logic nand3(input logic x, input logic y, input logic z);
    return ~(x & y & z);
  endfunction

  function automatic logic nand4(input logic w, input logic x, input logic y, input logic z);
    return ~(w & x & y & z);
  endfunction

  // x XOR y = (x NAND (x NAND y)) NAND ((x NAND y) NAND y): four NAND gates.
  function automatic logic nand_xor(input logic x, input logic y);
    logic n;
    n = nand2(x, y);
    return nand2(nand2(x, n), nand2(n, y));
  endfunction

endpackage
