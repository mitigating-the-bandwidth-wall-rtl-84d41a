// tb_mf_tile_sram: self-checking test of the 4 KB output tile SRAM at its
// default size (64 words of 512 bits).
//
// Writes random data to every word in a random order, then reads all words
// back and compares with a reference array kept here, checking that data
// appears exactly one cycle after the read enable and that a read without
// enable holds the last output. Also checks read-during-write of the same
// address returns the old word.
`timescale 1ns/1ps
module tb_mf_tile_sram;
  localparam int DEPTH = 64, WIDTH = 512;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  logic we = 0, re = 0;
  logic [5:0] waddr = 0, raddr = 0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [WIDTH-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  mf_tile_sram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  function automatic logic [WIDTH-1:0] rnd();
    logic [WIDTH-1:0] v;
    for (int i = 0; i < WIDTH / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    int order [DEPTH];
    for (int i = 0; i < DEPTH; i++) order[i] = i;
    order.shuffle();
    foreach (order[i]) begin
      @(negedge clk);
      we = 1; waddr = 6'(order[i]); wdata = rnd();
      ref_mem[order[i]] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      re = 1; raddr = 6'(i);
      @(negedge clk);
      re = 0;
      checks++;
      if (rdata !== ref_mem[i]) begin failures++; $display("FAIL: word %0d", i); end
      raddr = 6'((i + 1) % DEPTH);
      @(negedge clk);
      checks++;
      if (rdata !== ref_mem[i]) begin failures++; $display("FAIL: hold word %0d", i); end
    end
    // read and write the same address in one cycle
    @(negedge clk);
    we = 1; waddr = 6'd5; wdata = rnd(); re = 1; raddr = 6'd5;
    @(negedge clk);
    we = 0; re = 0;
    checks++;
    if (rdata !== ref_mem[5]) begin failures++; $display("FAIL: read during write"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
