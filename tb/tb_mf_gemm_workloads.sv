// tb_mf_gemm_workloads: GEMM workloads on the accelerator at its default size
// (16 x 16 INT8 array, 4 KB pages, 16 x 256 tiles).
//
// Runs, one after another on the same accelerator:
//   * square GEMMs 64, 128, 256 (DM) and 512 (DC) from the micro-kernel
//     range; the 64 x 64 case has K = 64 < 256 and is zero-padded to one
//     full k-tile;
//   * one attention-score GEMM of a BERT-Base head, 128 x 64 times 64 x 128
//     (sequence 128, head dimension 64), from device memory (DevMem);
//   * one Q projection of a ViT-Base/16 head, 197 x 768 times 768 x 64
//     (197 tokens padded to 13 row tiles, hidden size 768 = 3 k-tiles).
// Each is driven through the register interface with the descriptor queue
// refilled while the array works, and every result element is compared with
// a product computed in the testbench. Each run also checks the array cycle
// count (SA_CYC) against descriptors x 256; for the host-memory runs, whose
// memory keeps up with the 32 bytes per cycle an INT8 array needs, the array
// must also be fed without a single idle cycle from first to last column.
`timescale 1ns/1ps
module tb_mf_gemm_workloads;
  import mf_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #0.5 clk = ~clk;   // 1 GHz

  logic      start = 1'b0, done;
  int        m_dim = 0, k_dim = 0, n_dim = 0;
  acc_mode_e mode = MODE_DM;
  int        h_checks, h_failures, n_desc;
  longint    span, fed;
  int        checks = 0, failures = 0;

  mf_gemm_host u_run (
    .clk, .rst_n, .start, .m_dim, .k_dim, .n_dim, .mode, .done,
    .checks(h_checks), .failures(h_failures), .n_desc, .span, .fed
  );

  task automatic run(input string name, input int m, input int k, input int n,
                     input acc_mode_e md, input bit gap_free);
    int c0, f0;
    c0 = h_checks; f0 = h_failures;
    @(negedge clk);
    m_dim = m; k_dim = k; n_dim = n; mode = md; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    @(posedge clk iff done);
    @(negedge clk);
    checks++;
    if (n_desc != ((m + 15) / 16) * ((n + 15) / 16) * ((k + 255) / 256)) begin
      failures++;
      $display("FAIL %s: %0d descriptors", name, n_desc);
    end
    if (gap_free) begin
      checks++;
      if (span != fed) begin
        failures++;
        $display("FAIL %s: array fed %0d of %0d cycles", name, fed, span);
      end
    end
    $display("%s: %0dx%0d x %0dx%0d, %0d descriptors, array fed %0d of %0d cycles (%0d%%), %0d checks, %0d failures",
             name, m, k, k, n, n_desc, fed, span, 100 * fed / span,
             h_checks - c0, h_failures - f0);
  endtask

  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    run("GEMM 64",            64,  64,  64, MODE_DM,     1'b1);
    run("GEMM 128",          128, 128, 128, MODE_DM,     1'b1);
    run("GEMM 256",          256, 256, 256, MODE_DM,     1'b1);
    run("GEMM 512",          512, 512, 512, MODE_DC,     1'b1);
    run("BERT-Base scores",  128,  64, 128, MODE_DEVMEM, 1'b0);
    run("ViT-Base Q head",   197, 768,  64, MODE_DM,     1'b1);
    checks   += h_checks;
    failures += h_failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + h_checks, failures + h_failures);
    $finish;
  end

endmodule
