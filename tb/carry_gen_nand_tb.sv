// carry_gen_nand_tb: self-checking test of the NAND carry generator.
//
// Drives the 32-bit instance (three look-ahead levels) and a 16-bit one (the
// two-level case) and a 5-bit one (padded top level) with corner values and
// random pairs, and compares carry with the reference A > B.  The 5-bit
// instance is checked exhaustively.
module carry_gen_nand_tb;
  int checks = 0, failures = 0;

  logic [31:0] a32, b32;
  logic [15:0] a16, b16;
  logic [4:0]  a5, b5;
  logic        c32, c16, c5;

  carry_gen_nand #(.WIDTH(32)) dut32 (.a(a32), .b(b32), .carry(c32));
  carry_gen_nand #(.WIDTH(16)) dut16 (.a(a16), .b(b16), .carry(c16));
  carry_gen_nand #(.WIDTH(5))  dut5  (.a(a5),  .b(b5),  .carry(c5));

  task automatic check32(input logic [31:0] x, input logic [31:0] y);
    a32 = x; b32 = y; #1;
    checks++;
    if (c32 !== (x > y)) begin
      failures++;
      $display("FAIL w32 a=%h b=%h carry=%b", x, y, c32);
    end
  endtask

  task automatic check16(input logic [15:0] x, input logic [15:0] y);
    a16 = x; b16 = y; #1;
    checks++;
    if (c16 !== (x > y)) begin
      failures++;
      $display("FAIL w16 a=%h b=%h carry=%b", x, y, c16);
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
    check32(0, 0);
    check32(1, 0);
    check32(0, 1);
    check32('1, '1);
    check32('1, '1 - 1);
    check32('1 - 1, '1);
    check32(32'h8000_0000, 32'h7fff_ffff);
    check32(32'h7fff_ffff, 32'h8000_0000);
    // Pairs differing in one bit position only: each exercises one carry chain.
    for (int i = 0; i < 32; i++) begin
      r = $urandom;
      check32(r | (32'd1 << i), r & ~(32'd1 << i));
      check32(r & ~(32'd1 << i), r | (32'd1 << i));
      check32(r, r);
    end
    for (int n = 0; n < 5000; n++) begin
      r = $urandom;
      check32(r, $urandom);
      check32(r, r ^ (32'd1 << ($urandom % 32)));
      check16(16'($urandom), 16'($urandom));
    end
    for (int x = 0; x < 32; x++)
      for (int y = 0; y < 32; y++) begin
        a5 = 5'(x); b5 = 5'(y); #1;
        checks++;
        if (c5 !== (x > y)) begin
          failures++;
          $display("FAIL w5 a=%0d b=%0d carry=%b", x, y, c5);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
