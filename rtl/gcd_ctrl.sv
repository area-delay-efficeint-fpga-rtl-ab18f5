// gcd_ctrl: controller (finite state machine) of the GCD engine.
//
// States:
//   S_IDLE  after reset.  On go_i both operand registers are loaded from the
//           external inputs (xsel = ysel = 0, xld = yld = 1) -> S_CALC.
//   S_CALC  one Euclid step per clock: if the registers are equal (or one is
//           zero) the result register is loaded (enable) -> S_DONE; otherwise
//           the larger register is loaded with |A - B| (A > B: xsel, xld;
//           else ysel, yld) and the FSM stays in S_CALC.
//   S_DONE  done_o is high and d_o holds the result; go_i starts again.
// The paper names the control signals and says the controller issues
// commands to the datapath from its state and the comparison result; the
// states and their transitions here are this design's own (the paper's
// diagram lists seven states but not what they do).  done_o is also an
// addition: the paper's top level has no completion output.
//
// Timing: with k subtraction steps, done_o rises k + 2 clock edges after the
// edge that samples go_i.  rst is synchronous and active high.
module gcd_ctrl
  import gcd_pkg::*;
(
  input  logic      clk,
  input  logic      rst,
  input  logic      go_i,
  input  gcd_stat_t stat,
  output gcd_ctrl_t ctrl,
  output logic      done_o
);

  gcd_state_t state, state_nxt;

  always_ff @(posedge clk) begin
    if (rst) state <= S_IDLE;
    else     state <= state_nxt;
  end

  always_comb begin
    ctrl      = '0;
    state_nxt = state;
    unique case (state)
      S_IDLE, S_DONE: begin
        if (go_i) begin
          ctrl.xld  = 1'b1;
          ctrl.yld  = 1'b1;
          state_nxt = S_CALC;
        end
      end
      S_CALC: begin
        if (stat.eq || stat.a_zero || stat.b_zero) begin
          ctrl.enable = 1'b1;
          state_nxt   = S_DONE;
        end else if (stat.a_gt_b) begin
          ctrl.xsel = 1'b1;
          ctrl.xld  = 1'b1;
        end else begin
          ctrl.ysel = 1'b1;
          ctrl.yld  = 1'b1;
        end
      end
      default: state_nxt = S_IDLE;
    endcase
  end

  assign done_o = (state == S_DONE);

  // Exactly one register is rewritten per step, and never both muxes select
  // the feedback at once.
  assert property (@(posedge clk) disable iff (rst) !(ctrl.xsel && ctrl.ysel));
  assert property (@(posedge clk) disable iff (rst) ctrl.enable |-> !(ctrl.xld || ctrl.yld));

endmodule
