// tb_fp32_addsub: self-checking test of the binary32 adder / subtractor.
// Directed special cases (signed zeros, exact cancellation, infinities, NaN,
// overflow, a tie rounded to even) and 30000 random sums and differences,
// including operands of nearly equal magnitude (massive cancellation) and
// operands far apart (sticky-only alignment), each compared bit for bit with
// the correctly rounded reference of tb_fp_pkg.
module tb_fp32_addsub;
  import tb_fp_pkg::*;

  logic [31:0] a, b, s;
  logic        sub;
  int checks = 0, failures = 0;

  fp32_addsub dut (.a(a), .b(b), .sub(sub), .s(s));

  task automatic check(input logic [31:0] x, input logic [31:0] y, input logic op,
                       input logic [31:0] exp_s);
    a = x; b = y; sub = op;
    #1;
    checks++;
    if (s !== exp_s) begin
      failures++;
      if (failures < 10) $display("FAIL %h %s %h = %h, expected %h", x, op ? "-" : "+", y, s, exp_s);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'h3F80_0000, 32'h3F80_0000, 1'b0, 32'h4000_0000);  // 1 + 1
    check(32'h3F80_0000, 32'h3F80_0000, 1'b1, 32'h0000_0000);  // 1 - 1 = +0
    check(32'h4040_0000, 32'h3F80_0000, 1'b1, 32'h4000_0000);  // 3 - 1
    check(32'h0000_0000, 32'h8000_0000, 1'b0, 32'h0000_0000);  // +0 + -0
    check(32'h8000_0000, 32'h8000_0000, 1'b0, 32'h8000_0000);  // -0 + -0
    check(32'h0000_0000, 32'hC000_0000, 1'b0, 32'hC000_0000);  // 0 + -2
    check(32'h0000_0000, 32'h4000_0000, 1'b1, 32'hC000_0000);  // 0 - 2
    check(32'h7F80_0000, 32'h7F80_0000, 1'b1, 32'h7FC0_0000);  // inf - inf
    check(32'h7F80_0000, 32'h4000_0000, 1'b1, 32'h7F80_0000);  // inf - 2
    check(32'h4000_0000, 32'h7F80_0000, 1'b1, 32'hFF80_0000);  // 2 - inf
    check(32'h7F7F_FFFF, 32'h7F7F_FFFF, 1'b0, 32'h7F80_0000);  // overflow
    check(32'h4B80_0000, 32'h3F80_0000, 1'b0, 32'h4B80_0000);  // 2^24 + 1: tie to even
    check(32'h4B80_0000, 32'h4000_0000, 1'b0, 32'h4B80_0001);  // 2^24 + 2
    check(32'h3F80_0000, 32'h2F80_0000, 1'b1, fsub(32'h3F80_0000, 32'h2F80_0000));
    for (int n = 0; n < 10000; n++) begin
      logic [31:0] x, y;
      logic        op;
      x  = rand_fp(40);
      y  = rand_fp(40);
      op = 1'($urandom);
      check(x, y, op, op ? fsub(x, y) : fadd(x, y));
    end
    for (int n = 0; n < 10000; n++) begin   // close magnitudes
      logic [31:0] x, y;
      logic        op;
      x  = rand_fp(10);
      y  = {x[31:23] ^ 9'($urandom_range(1, 0)), 23'(x[22:0] + 23'($urandom_range(15, 0)) - 23'd7)};
      op = 1'($urandom);
      check(x, y, op, op ? fsub(x, y) : fadd(x, y));
    end
    for (int n = 0; n < 10000; n++) begin   // small exponents differences
      logic [31:0] x, y;
      logic        op;
      x  = rand_fp(3);
      y  = rand_fp(3);
      op = 1'($urandom);
      check(x, y, op, op ? fsub(x, y) : fadd(x, y));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
