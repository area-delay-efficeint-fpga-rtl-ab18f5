// gcd_datapath: operand multiplexers, operand registers, SAD block and result
// register of the GCD engine.
//
// MUX_A/MUX_B pick, for Reg_A/Reg_B, either the external operand (sel = 0)
// or the SAD output |Reg_A - Reg_B| (sel = 1), which is fed back to both, as
// in the block diagram of the design.  The controller loads the larger
// register with the difference each cycle; the SAD block's carry (A > B) and
// NOR (A == B) tell it which register that is and when to stop.  The result
// register Reg is loaded when `enable` is high.
//
// Besides the equality flag, the datapath reports Reg_A == 0 and
// Reg_B == 0, and the result register takes Reg_B when Reg_A is zero and
// Reg_A otherwise; this lets gcd(0, x) = x finish instead of looping.  The
// paper assumes positive operands and does not have these zero flags: they
// are this design's own addition.
//
// Timing: all registers are updated on the rising edge of clk; rst is
// synchronous and active high and clears Reg_A, Reg_B and Reg.  The SAD path
// from Reg_A/Reg_B back to Reg_A/Reg_B is the critical path.
module gcd_datapath
  import gcd_pkg::*;
#(
  parameter int unsigned WIDTH = GCD_WIDTH
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [WIDTH-1:0] a_i,
  input  logic [WIDTH-1:0] b_i,
  input  gcd_ctrl_t        ctrl,
  output gcd_stat_t        stat,
  output logic [WIDTH-1:0] d_o
);

  logic [WIDTH-1:0] reg_a, reg_b, mux_a, mux_b, abs_d;
  logic             a_gt_b, eq;

  assign mux_a = ctrl.xsel ? abs_d : a_i;
  assign mux_b = ctrl.ysel ? abs_d : b_i;

  always_ff @(posedge clk) begin
    if (rst) begin
      reg_a <= '0;
      reg_b <= '0;
      d_o   <= '0;
    end else begin
      if (ctrl.xld)    reg_a <= mux_a;
      if (ctrl.yld)    reg_b <= mux_b;
      if (ctrl.enable) d_o   <= stat.a_zero ? reg_b : reg_a;
    end
  end

  sad_unit #(.WIDTH(WIDTH)) u_sad (
    .a      (reg_a),
    .b      (reg_b),
    .abs_o  (abs_d),
    .a_gt_b (a_gt_b),
    .eq     (eq)
  );

  assign stat.a_gt_b = a_gt_b;
  assign stat.eq     = eq;
  assign stat.a_zero = ~|reg_a;
  assign stat.b_zero = ~|reg_b;

endmodule
