// tb_fp32_mul: self-checking test of the binary32 multiplier.
// Directed special cases (zeros, infinities, NaN, overflow, underflow, a
// rounding carry into the exponent) and 20000 random products over a wide
// exponent range, each compared bit for bit with the correctly rounded
// double-precision reference of tb_fp_pkg.
module tb_fp32_mul;
  import tb_fp_pkg::*;

  logic [31:0] a, b, p;
  int checks = 0, failures = 0;

  fp32_mul dut (.a(a), .b(b), .p(p));

  task automatic check(input logic [31:0] x, input logic [31:0] y, input logic [31:0] exp_p);
    a = x; b = y;
    #1;
    checks++;
    if (p !== exp_p) begin
      failures++;
      if (failures < 10) $display("FAIL mul %h * %h = %h, expected %h", x, y, p, exp_p);
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
    // Directed cases.
    check(32'h3F80_0000, 32'h4000_0000, 32'h4000_0000);   // 1 * 2 = 2
    check(32'hBFC0_0000, 32'h4000_0000, 32'hC040_0000);   // -1.5 * 2 = -3
    check(32'h0000_0000, 32'h4000_0000, 32'h0000_0000);   // 0 * 2
    check(32'h8000_0000, 32'h4000_0000, 32'h8000_0000);   // -0 * 2
    check(32'h7F80_0000, 32'h4000_0000, 32'h7F80_0000);   // inf * 2
    check(32'h7F80_0000, 32'h0000_0000, 32'h7FC0_0000);   // inf * 0
    check(32'h7FC0_0001, 32'h3F80_0000, 32'h7FC0_0000);   // NaN
    check(32'h7F00_0000, 32'h4100_0000, 32'h7F80_0000);   // overflow
    check(32'h0080_0000, 32'h3E80_0000, 32'h0000_0000);   // underflow -> 0
    check(32'h3FFF_FFFF, 32'h3FFF_FFFF, fmul(32'h3FFF_FFFF, 32'h3FFF_FFFF));
    check(32'h3F7F_FFFF, 32'h3F80_0001, fmul(32'h3F7F_FFFF, 32'h3F80_0001));
    // Random cases.
    for (int n = 0; n < 20000; n++) begin
      logic [31:0] x, y;
      x = rand_fp(60);
      y = rand_fp(60);
      check(x, y, fmul(x, y));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
