// tb_mf_in_buffer: self-checking test of a 4 KB input tile buffer at its
// default size (16 rows x 256 INT8 elements, 64 beats of 64 bytes).
//
// Writes a random page beat by beat in the DMA's order (row-major bytes),
// then reads every column k = 0..255 in a random order and compares the 16
// elements of each column with the page bytes at row * 256 + k. Data must
// appear one cycle after rd_en.
`timescale 1ns/1ps
module tb_mf_in_buffer;
  localparam int W = 16, L = 256;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [5:0] waddr = 0;
  logic [511:0] wdata = '0;
  logic [7:0] rd_k = 0;
  logic [W-1:0][7:0] rd_col;
  byte page [4096];
  int checks = 0, failures = 0;

  mf_in_buffer #(.W(W), .DATA_W(8)) dut (.*);

  initial begin
    int ks [L];
    foreach (page[i]) page[i] = byte'($urandom);
    for (int b = 0; b < 64; b++) begin
      @(negedge clk);
      wr_en = 1; waddr = 6'(b);
      for (int e = 0; e < 64; e++) wdata[e*8 +: 8] = page[b*64 + e];
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < L; i++) ks[i] = i;
    ks.shuffle();
    foreach (ks[n]) begin
      @(negedge clk);
      rd_en = 1; rd_k = 8'(ks[n]);
      @(negedge clk);
      rd_en = 0;
      for (int r = 0; r < W; r++) begin
        checks++;
        if (rd_col[r] !== page[r*L + ks[n]]) begin
          failures++;
          $display("FAIL: row %0d k %0d: %h expected %h", r, ks[n], rd_col[r], page[r*L + ks[n]]);
        end
      end
    end
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
