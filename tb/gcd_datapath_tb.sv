// gcd_datapath_tb: self-checking test of the GCD datapath with the controller
// replaced by directly driven commands.
//
// A model of Reg_A/Reg_B kept here predicts the status flags and the result
// register.  Each trial loads two operands through the multiplexers, then
// issues steps that rewrite Reg_A or Reg_B with the SAD output (chosen at
// random, not only the larger one, so both feedback paths are exercised in
// both directions), then loads Reg.  rst is checked to clear everything.
module gcd_datapath_tb;
  import gcd_pkg::*;
  int checks = 0, failures = 0;

  logic        clk = 0, rst = 1;
  logic [31:0] a_i, b_i, d_o;
  gcd_ctrl_t   ctrl;
  gcd_stat_t   stat;
  logic [31:0] ma, mb, md;  // model of Reg_A, Reg_B, Reg

  gcd_datapath #(.WIDTH(32)) dut (.clk, .rst, .a_i, .b_i, .ctrl, .stat, .d_o);

  always #5 clk = ~clk;

  function automatic logic [31:0] absd(input logic [31:0] x, input logic [31:0] y);
    return (x > y) ? x - y : y - x;
  endfunction

  task automatic check_state(input string what);
    checks++;
    if (stat.a_gt_b !== (ma > mb) || stat.eq !== (ma == mb) ||
        stat.a_zero !== (ma == 0) || stat.b_zero !== (mb == 0) || d_o !== md) begin
      failures++;
      $display("FAIL %s: A=%h B=%h d_o=%h (exp %h) stat=%b", what, ma, mb, d_o, md, stat);
    end
  endtask

  // Apply one command for one clock and update the model.
  task automatic step(input gcd_ctrl_t c);
    logic [31:0] na, nb, nd;
    ctrl = c;
    na = c.xld ? (c.xsel ? absd(ma, mb) : a_i) : ma;
    nb = c.yld ? (c.ysel ? absd(ma, mb) : b_i) : mb;
    nd = c.enable ? ((ma == 0) ? mb : ma) : md;
    @(posedge clk);
    #1;
    ma = na; mb = nb; md = nd;
    ctrl = '0;
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    gcd_ctrl_t c;
    ctrl = '0; a_i = '0; b_i = '0;
    repeat (2) @(posedge clk);
    #1;
    rst = 0;
    ma = 0; mb = 0; md = 0;
    check_state("after reset");
    for (int t = 0; t < 2000; t++) begin
      a_i = $urandom; b_i = $urandom;
      if (t % 7 == 0) a_i = 0;
      if (t % 11 == 0) b_i = a_i;
      c = '0; c.xld = 1; c.yld = 1;
      step(c);
      check_state("load");
      for (int s = 0; s < 8; s++) begin
        c = '0;
        if ($urandom % 2) begin c.xsel = 1; c.xld = 1; end
        else begin c.ysel = 1; c.yld = 1; end
        a_i = $urandom; b_i = $urandom;  // must be ignored while sel = 1
        step(c);
        check_state("step");
      end
      c = '0; c.enable = 1;
      step(c);
      check_state("result");
      c = '0;  // idle cycle: nothing may change
      step(c);
      check_state("hold");
    end
    rst = 1;
    @(posedge clk);
    #1;
    rst = 0;
    ma = 0; mb = 0; md = 0;
    check_state("second reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
