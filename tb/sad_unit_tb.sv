// sad_unit_tb: self-checking test of the SAD block.
//
// For corner and random operand pairs it compares abs_o with |A - B|, a_gt_b
// with A > B and eq with A == B, all computed here from the operands.
module sad_unit_tb;
  int checks = 0, failures = 0;

  logic [31:0] a, b, abs_o;
  logic        a_gt_b, eq;

  sad_unit #(.WIDTH(32)) dut (.a(a), .b(b), .abs_o(abs_o), .a_gt_b(a_gt_b), .eq(eq));

  task automatic check(input logic [31:0] x, input logic [31:0] y);
    logic [31:0] d;
    a = x; b = y; #1;
    d = (x > y) ? x - y : y - x;
    checks++;
    if (abs_o !== d || a_gt_b !== (x > y) || eq !== (x == y)) begin
      failures++;
      $display("FAIL a=%h b=%h abs=%h (exp %h) gt=%b eq=%b", x, y, abs_o, d, a_gt_b, eq);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    check(0, 0);
    check(5, 3);
    check(3, 5);
    check('1, 0);
    check(0, '1);
    check('1, '1);
    check(32'h8000_0000, 1);
    check(1, 32'h8000_0000);
    for (int n = 0; n < 10000; n++) begin
      r = $urandom;
      check(r, $urandom);
      check(r, r);
      check(r, r + 32'($urandom % 4));
      check(r, r - 32'($urandom % 4));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
