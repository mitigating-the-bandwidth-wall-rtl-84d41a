// tb_mf_systolic_array: self-checking test of the 16 x 16 output-stationary
// array at its default size.
//
// Feeds three output tiles back to back (no idle cycle between them) and a
// fourth after a gap, with random INT8 A and B columns and, for one tile,
// random valid gaps inside the stream. Each tile's 16 x 16 result
// C[i][j] = sum_k A[i][k] * B[j][k] is computed here and compared with the
// drained rows. Timing checks: the first drained row (row W-1) appears
// exactly 2W cycles after the last beat is fed, rows follow on consecutive
// cycles down to row 0, and the array accepts a beat on every cycle (the
// fill/drain skew of 2(W-1) cycles is hidden when tiles follow each other).
`timescale 1ns/1ps
module tb_mf_systolic_array;
  localparam int W = 16, LK = 64, NT = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic                  in_valid = 0, in_last = 0, out_valid, busy;
  logic [W-1:0][7:0]     a_col = '0, b_col = '0;
  logic [3:0]            out_row;
  logic [W-1:0][31:0]    out_data;
  int checks = 0, failures = 0;

  mf_systolic_array #(.W(W), .DATA_W(8), .ACC_W(32)) dut (.*);

  int     expc [NT][W][W];
  longint last_fed [NT];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // monitor: collect drained rows
  int tile_out = 0, row_seen = 0;
  longint first_row_cyc;
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (out_row != 4'(W - 1 - row_seen)) begin
        failures++; $display("FAIL: tile %0d row order %0d", tile_out, out_row);
      end
      if (row_seen == 0) begin
        checks++;
        if (cyc - last_fed[tile_out] != 2 * W) begin
          failures++;
          $display("FAIL: tile %0d first row %0d cycles after last beat, expected %0d",
                   tile_out, cyc - last_fed[tile_out], 2 * W);
        end
      end
      for (int j = 0; j < W; j++) begin
        checks++;
        if (out_data[j] !== 32'(expc[tile_out][out_row][j])) begin
          failures++;
          $display("FAIL: tile %0d C[%0d][%0d] = %0d expected %0d", tile_out, out_row, j,
                   $signed(out_data[j]), expc[tile_out][out_row][j]);
        end
      end
      row_seen++;
      if (row_seen == W) begin row_seen = 0; tile_out++; end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < NT; t++) begin
      for (int i = 0; i < W; i++) for (int j = 0; j < W; j++) expc[t][i][j] = 0;
      if (t == 3) begin
        @(negedge clk); in_valid = 0; in_last = 0;
        repeat (100) @(negedge clk);
      end
      for (int k = 0; k < LK; k++) begin
        // tile 2 has random gaps (valid low) inside its stream
        if (t == 2) while ($urandom_range(0, 3) == 0) begin
          @(negedge clk); in_valid = 0; in_last = 0; a_col = '1; b_col = '1;
        end
        @(negedge clk);
        in_valid = 1; in_last = (k == LK - 1);
        for (int i = 0; i < W; i++) begin
          a_col[i] = 8'($urandom); b_col[i] = 8'($urandom);
        end
        for (int i = 0; i < W; i++) for (int j = 0; j < W; j++)
          expc[t][i][j] += int'($signed(a_col[i])) * int'($signed(b_col[j]));
        if (k == LK - 1) last_fed[t] = cyc;
      end
    end
    @(negedge clk); in_valid = 0; in_last = 0;
    repeat (4 * W) @(negedge clk);
    checks++;
    if (tile_out != NT) begin failures++; $display("FAIL: %0d tiles drained", tile_out); end
    checks++;
    if (busy) begin failures++; $display("FAIL: busy after drain"); end
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
