// gcdsad_top_tb: end-to-end test of the GCD engine at its default width.
//
// Runs directed and random operand pairs through gcdsad_top with no
// parameter override.  Each result is compared with gcd(A, B) from the
// remainder form of Euclid's algorithm, and the number of clock edges from
// the go_i edge to done_o with k + 2, k being the number of subtraction
// steps worked out here.  Random pairs are drawn as g*m, g*n with small
// cofactors so that the step count stays bounded; pairs whose step count is
// too large for the run are redrawn.
//
// It also counts how often each mechanism of the engine occurs and fails if
// one never does: a step that rewrites Reg_A (A > B), one that rewrites
// Reg_B (A < B), termination on equality, termination on a zero operand, a
// restart with go_i while a result is held, and a reset in mid-computation.
module gcdsad_top_tb;
  int checks = 0, failures = 0;
  int n_a_step = 0, n_b_step = 0, n_eq_end = 0, n_zero_end = 0, n_restart = 0, n_midreset = 0;

  logic        clk = 0, rst = 1, go_i = 0, done_o;
  logic [31:0] a_i = 0, b_i = 0, d_o;

  gcdsad_top dut (.clk, .rst, .go_i, .a_i, .b_i, .d_o, .done_o);

  always #5 clk = ~clk;

  localparam int MAX_STEPS = 20000;

  function automatic logic [31:0] ref_gcd(input logic [31:0] x, input logic [31:0] y);
    logic [31:0] t;
    while (y != 0) begin
      t = x % y; x = y; y = t;
    end
    return x;
  endfunction

  // Subtraction steps of the loop that stops when both values are equal.
  function automatic longint ref_steps(input logic [31:0] x, input logic [31:0] y);
    logic [31:0] t;
    longint s;
    s = 0;
    if (x == 0 || y == 0) return 0;
    forever begin
      if (x < y) begin t = x; x = y; y = t; end
      if (x % y == 0) return s + longint'({32'd0, x / y}) - 64'd1;
      s += longint'({32'd0, x / y});
      x = x % y;
    end
  endfunction

  // Watch the controller's commands to count the two kinds of step.
  always @(posedge clk) begin
    if (!rst && dut.ctrl.xsel && dut.ctrl.xld) n_a_step <= n_a_step + 1;
    if (!rst && dut.ctrl.ysel && dut.ctrl.yld) n_b_step <= n_b_step + 1;
  end

  task automatic run(input logic [31:0] x, input logic [31:0] y);
    int n;
    longint k;
    if (done_o) n_restart++;
    a_i = x; b_i = y; go_i = 1;
    @(posedge clk); #1;
    go_i = 0;
    a_i = $urandom; b_i = $urandom;  // operands are sampled only with go_i
    n = 1;
    while (!done_o && n < MAX_STEPS + 10) begin
      @(posedge clk); #1;
      n++;
    end
    k = ref_steps(x, y);
    checks++;
    if (!done_o || d_o !== ref_gcd(x, y)) begin
      failures++;
      $display("FAIL gcd(%0d, %0d) = %0d, expected %0d (done=%b)", x, y, d_o, ref_gcd(x, y), done_o);
    end
    checks++;
    if (longint'(n) != k + 2) begin
      failures++;
      $display("FAIL latency gcd(%0d, %0d): %0d cycles, expected %0d", x, y, n, k + 2);
    end
    if (x == 0 || y == 0) n_zero_end++;
    else n_eq_end++;
  endtask

  task automatic run_random();
    logic [31:0] g, m, n;
    do begin
      g = 32'(1) << ($urandom % 20);
      g = g | (32'($urandom) & (g - 1));
      m = 32'($urandom % 4096) + 1;
      n = 32'($urandom % 4096) + 1;
    end while (64'(g) * 64'(m) > 64'hffff_ffff || 64'(g) * 64'(n) > 64'hffff_ffff ||
               ref_steps(g * m, g * n) > longint'(MAX_STEPS));
    run(g * m, g * n);
  endtask

  initial begin : watchdog
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1;
    rst = 0;
    checks++;
    if (done_o || d_o !== 0) begin
      failures++;
      $display("FAIL after reset: done=%b d_o=%h", done_o, d_o);
    end
    run(12, 18);
    run(1071, 462);
    run(32'hffff_ffff, 32'hffff_ffff);
    run(32'hffff_fffe, 32'h7fff_ffff);
    run(32'h8000_0000, 32'h4000_0000);
    run(0, 77);
    run(77, 0);
    run(0, 0);
    run(32'd2971215073, 32'd1836311903);  // consecutive Fibonacci numbers
    for (int t = 0; t < 400; t++) run_random();
    // Reset during a computation, then check the engine still works.
    a_i = 1; b_i = 32'd100000; go_i = 1;
    @(posedge clk); #1;
    go_i = 0;
    repeat (50) @(posedge clk);
    #1;
    rst = 1;
    @(posedge clk); #1;
    rst = 0;
    n_midreset++;
    checks++;
    if (done_o || d_o !== 0) begin
      failures++;
      $display("FAIL reset during computation: done=%b d_o=%h", done_o, d_o);
    end
    run(36, 60);

    $display("mechanisms: A-steps=%0d B-steps=%0d equal-ends=%0d zero-ends=%0d restarts=%0d mid-resets=%0d",
             n_a_step, n_b_step, n_eq_end, n_zero_end, n_restart, n_midreset);
    checks++;
    if (n_a_step == 0 || n_b_step == 0 || n_eq_end == 0 || n_zero_end == 0 ||
        n_restart == 0 || n_midreset == 0) begin
      failures++;
      $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
