// tb_mf_pe: self-checking test of one processing element.
//
// Streams random signed INT8 operand pairs with random valid gaps through the
// PE and checks: the A and B operands and the valid/last side band come out
// one cycle later; the result register holds the exact sum of the valid
// products (32-bit wrap) after the beat marked last; the accumulator restarts
// at zero, so the next tile's sum is independent; shift loads sum_in into the
// result register. Expected values are computed here from the driven stimuli.
`timescale 1ns/1ps
module tb_mf_pe;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic [7:0]  a_in, b_in, a_out, b_out;
  logic        v_in, l_in, v_out, l_out, shift;
  logic [31:0] sum_in, sum_out;
  int checks = 0, failures = 0;

  mf_pe #(.DATA_W(8), .ACC_W(32)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int exp;
    a_in = 0; b_in = 0; v_in = 0; l_in = 0; shift = 0; sum_in = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 20; t++) begin
      int n = 1 + $urandom_range(0, 40);
      exp = 0;
      for (int i = 0; i < n; i++) begin
        logic [7:0] a, b;
        bit v;
        a = 8'($urandom); b = 8'($urandom);
        v = (i == n - 1) ? 1'b1 : 1'($urandom_range(0, 3) != 0);
        @(negedge clk);
        a_in = a; b_in = b; v_in = v; l_in = (i == n - 1);
        if (v) exp += int'($signed(a)) * int'($signed(b));
        @(negedge clk);
        check(a_out == a && b_out == b && v_out == v && l_out == (v && i == n - 1),
              "operands and side band forwarded after one cycle");
        v_in = 0; l_in = 0;
      end
      // product of the last beat is accumulated one edge after registering
      @(negedge clk);
      check(sum_out == 32'(exp), $sformatf("tile %0d: sum %0d, expected %0d",
                                           t, $signed(sum_out), exp));
      // drain: shift takes sum_in
      sum_in = $urandom; shift = 1;
      @(negedge clk);
      shift = 0;
      check(sum_out == sum_in, "shift loads sum_in");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
