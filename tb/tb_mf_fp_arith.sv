// tb_mf_fp_arith: self-checking test of the floating-point multiplier (half
// and single precision operands) and the single-precision adder of the
// processing element.
//
// Random operands over a wide exponent range, pairs of nearly equal numbers
// of opposite sign (cancellation), operands of very different size (shifted
// out completely) and products that overflow are compared bit for bit with
// the reference rounding of mf_fp_ref_pkg. Special cases are checked with
// fixed values: zeros, infinities, NaN, inf x 0, inf - inf, exact
// cancellation to +0, overflow to infinity and flush of tiny results to zero.
`timescale 1ns/1ps
module tb_mf_fp_arith;
  import mf_fp_ref_pkg::*;

  logic [31:0] add_a, add_b, add_y, m32_a, m32_b, m32_y, m16_y;
  logic [15:0] m16_a, m16_b;
  int checks = 0, failures = 0, shown = 0;

  mf_fp_add                  u_add (.a(add_a), .b(add_b), .y(add_y));
  mf_fp_mul #(.DATA_W(32))   u_m32 (.a(m32_a), .b(m32_b), .y(m32_y));
  mf_fp_mul #(.DATA_W(16))   u_m16 (.a(m16_a), .b(m16_b), .y(m16_y));

  task automatic check(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (shown++ < 10) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic t_add(input logic [31:0] a, input logic [31:0] b);
    add_a = a; add_b = b; #1;
    check(add_y, add(a, b), $sformatf("%h + %h", a, b));
  endtask

  task automatic t_m32(input logic [31:0] a, input logic [31:0] b);
    m32_a = a; m32_b = b; #1;
    check(m32_y, mul(a, b, 32), $sformatf("%h * %h (single)", a, b));
  endtask

  task automatic t_m16(input logic [15:0] a, input logic [15:0] b);
    m16_a = a; m16_b = b; #1;
    check(m16_y, mul(32'(a), 32'(b), 16), $sformatf("%h * %h (half)", a, b));
  endtask

  initial begin
    for (int i = 0; i < 20000; i++) begin
      logic [31:0] x, y;
      x = rand_fp(32, 60);
      y = rand_fp(32, 60);
      t_add(x, y);
      t_m32(x, y);
      t_m16(16'(rand_fp(16, 14)), 16'(rand_fp(16, 14)));
      // cancellation: same exponent region, opposite signs
      y = {~x[31], x[30:23], x[22:0] ^ 23'($urandom_range(255))};
      t_add(x, y);
      // very different magnitudes
      y = rand_fp(32, 10);
      t_add(rand_fp(32, 10) ^ 32'h1000_0000, y);
      // products near the top of the range
      t_m32({1'b0, 8'd250, 23'($urandom)}, {1'b0, 8'(120 + $urandom_range(15)), 23'($urandom)});
    end
    // special values, expected results written out
    add_a = 32'h3f80_0000; add_b = 32'hbf80_0000; #1; check(add_y, 32'h0000_0000, "1 - 1 = +0");
    add_a = 32'h7f80_0000; add_b = 32'hff80_0000; #1; check(add_y, 32'h7fc0_0000, "inf - inf = NaN");
    add_a = 32'h7f80_0000; add_b = 32'h3f80_0000; #1; check(add_y, 32'h7f80_0000, "inf + 1 = inf");
    add_a = 32'h7fc0_0001; add_b = 32'h3f80_0000; #1; check(add_y, 32'h7fc0_0000, "NaN + 1 = NaN");
    add_a = 32'h7f7f_ffff; add_b = 32'h7f7f_ffff; #1; check(add_y, 32'h7f80_0000, "max + max = inf");
    add_a = 32'h0080_0001; add_b = 32'h8080_0000; #1; check(add_y, 32'h0000_0000, "tiny difference flushed");
    add_a = 32'h0000_0000; add_b = 32'h8000_0000; #1; check(add_y, 32'h0000_0000, "+0 + -0 = +0");
    add_a = 32'h3f80_0000; add_b = 32'h3380_0000; #1; check(add_y, 32'h3f80_0000, "1 + 2^-24 ties to even");
    add_a = 32'h3f80_0001; add_b = 32'h3380_0000; #1; check(add_y, 32'h3f80_0002, "odd + half ulp rounds up");
    m32_a = 32'h7f80_0000; m32_b = 32'h0000_0000; #1; check(m32_y, 32'h7fc0_0000, "inf * 0 = NaN");
    m32_a = 32'hff80_0000; m32_b = 32'h4000_0000; #1; check(m32_y, 32'hff80_0000, "-inf * 2 = -inf");
    m32_a = 32'h7f00_0000; m32_b = 32'h4000_0000; #1; check(m32_y, 32'h7f80_0000, "2^127 * 2 = inf");
    m32_a = 32'h0080_0000; m32_b = 32'h3f00_0000; #1; check(m32_y, 32'h0000_0000, "min normal / 2 flushed");
    m32_a = 32'h0040_0000; m32_b = 32'h4000_0000; #1; check(m32_y, 32'h0000_0000, "subnormal input reads as 0");
    m16_a = 16'h3c00;      m16_b = 16'hc000;      #1; check(m16_y, 32'hc000_0000, "half 1 * -2 = -2");
    m16_a = 16'h7bff;      m16_b = 16'h7bff;      #1; check(m16_y, 32'h4f7f_c004, "half max squared, exact in single");
    m16_a = 16'h7c00;      m16_b = 16'h0000;      #1; check(m16_y, 32'h7fc0_0000, "half inf * 0 = NaN");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
