// gcd_ctrl_tb: self-checking test of the GCD controller.
//
// A behavioural model of the datapath registers, kept here, answers the
// controller's status inputs.  Each cycle the test checks that the command
// is the one Euclid's subtractive rule calls for (load on go_i, rewrite the
// larger register, load the result on equality or a zero operand), that
// done_o rises exactly k + 2 edges after go_i (k = number of steps), and
// that the model ends with gcd(A, B) in its result register.
module gcd_ctrl_tb;
  import gcd_pkg::*;
  int checks = 0, failures = 0;

  logic        clk = 0, rst = 1, go_i = 0, done_o;
  gcd_stat_t   stat;
  gcd_ctrl_t   ctrl;
  logic [31:0] ra, rb, rd, a_i, b_i;

  gcd_ctrl dut (.clk, .rst, .go_i, .stat, .ctrl, .done_o);

  always #5 clk = ~clk;

  assign stat.a_gt_b = ra > rb;
  assign stat.eq     = ra == rb;
  assign stat.a_zero = ra == 0;
  assign stat.b_zero = rb == 0;

  // Datapath model.
  always_ff @(posedge clk) begin
    if (ctrl.xld) ra <= ctrl.xsel ? ((ra > rb) ? ra - rb : rb - ra) : a_i;
    if (ctrl.yld) rb <= ctrl.ysel ? ((ra > rb) ? ra - rb : rb - ra) : b_i;
    if (ctrl.enable) rd <= (ra == 0) ? rb : ra;
  end

  function automatic logic [31:0] ref_gcd(input logic [31:0] x, input logic [31:0] y);
    logic [31:0] t;
    while (y != 0) begin
      t = x % y; x = y; y = t;
    end
    return x;
  endfunction

  // Number of subtraction steps of the subtractive Euclid loop that stops
  // when the two values are equal (0 when one operand is zero).
  function automatic int ref_steps(input logic [31:0] x, input logic [31:0] y);
    logic [31:0] t;
    int s;
    s = 0;
    if (x == 0 || y == 0) return 0;
    forever begin
      if (x < y) begin t = x; x = y; y = t; end
      if (x % y == 0) return s + int'(x / y) - 1;
      s += int'(x / y);
      x = x % y;
    end
  endfunction

  // Expected command for the current status while computing.
  task automatic check_cmd();
    gcd_ctrl_t e;
    e = '0;
    if (ra == rb || ra == 0 || rb == 0) e.enable = 1;
    else if (ra > rb) begin e.xsel = 1; e.xld = 1; end
    else begin e.ysel = 1; e.yld = 1; end
    checks++;
    if (ctrl !== e) begin
      failures++;
      $display("FAIL cmd A=%0d B=%0d ctrl=%b exp=%b", ra, rb, ctrl, e);
    end
  endtask

  task automatic run(input logic [31:0] x, input logic [31:0] y);
    int k, n;
    a_i = x; b_i = y;
    go_i = 1;
    #1;
    checks++;
    if (ctrl !== gcd_ctrl_t'(5'b00110)) begin
      failures++;
      $display("FAIL load command %b", ctrl);
    end
    @(posedge clk); #1;
    go_i = 0;
    k = 0;
    n = 0;
    while (!done_o && n < 100000) begin
      if (!ctrl.enable) k++;
      n++;
      check_cmd();
      @(posedge clk); #1;
    end
    checks++;
    if (k != ref_steps(x, y) || n != k + 1) begin
      failures++;
      $display("FAIL latency gcd(%0d,%0d): %0d steps, %0d cycles, exp %0d steps", x, y, k, n, ref_steps(x, y));
    end
    checks++;
    if (!done_o || rd !== ref_gcd(x, y)) begin
      failures++;
      $display("FAIL result gcd(%0d,%0d)=%0d exp %0d done=%b", x, y, rd, ref_gcd(x, y), done_o);
    end
    // Idle in S_DONE: no command without go_i.
    @(posedge clk); #1;
    checks++;
    if (ctrl !== '0 || !done_o) begin
      failures++;
      $display("FAIL idle in done: ctrl=%b done=%b", ctrl, done_o);
    end
  endtask

  initial begin : watchdog
    repeat (500000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_i = 0; b_i = 0; ra = 0; rb = 0; rd = 0;
    repeat (2) @(posedge clk);
    #1;
    rst = 0;
    checks++;
    if (done_o || ctrl !== '0) begin
      failures++;
      $display("FAIL after reset done=%b ctrl=%b", done_o, ctrl);
    end
    run(12, 18);
    run(18, 12);
    run(7, 7);
    run(0, 9);
    run(9, 0);
    run(1, 1000);
    for (int t = 0; t < 300; t++) run(32'($urandom % 5000) + 1, 32'($urandom % 5000) + 1);
    // Reset in the middle of a computation returns to idle.
    a_i = 1; b_i = 5000; go_i = 1;
    @(posedge clk); #1;
    go_i = 0;
    repeat (3) @(posedge clk);
    #1;
    rst = 1;
    @(posedge clk); #1;
    rst = 0;
    checks++;
    if (done_o || ctrl !== '0) begin
      failures++;
      $display("FAIL reset during compute done=%b ctrl=%b", done_o, ctrl);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
