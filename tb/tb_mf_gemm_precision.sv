// tb_mf_gemm_precision: the 512 x 512 GEMM at the other precisions the
// accelerator can be built for: INT16, INT32, FP16 and FP32 (INT8, the
// default build, is covered by the workload test).
//
// Four accelerators are built, with 16-bit and 32-bit integer elements and
// with half- and single-precision floating-point elements (sums in single
// precision, compared bit for bit with a reference that adds in the same
// order).
// The tile stays one 4 KB page, so tiles shrink to 16 x 128 and 16 x 64 and
// one tile pair keeps the array busy for only 128 or 64 cycles, while the two
// pages still need 128 beats of 64 bytes. Each runs a 512 x 512 x 512 GEMM of
// random signed operands from host memory in DM mode, and every result element
// is compared with a product computed here (32-bit wrap-around). The array
// cycle count must equal descriptors x L, and the share of cycles in which
// the array is fed may not exceed what the 64-byte-per-cycle memory port
// allows: 100 % for 16-bit (64 bytes per cycle needed) and 50 % for 32-bit
// elements (128 bytes per cycle needed).
`timescale 1ns/1ps
module tb_mf_gemm_precision;
  import mf_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #0.5 clk = ~clk;

  logic      start = 1'b0, done16, done32, doneh, dones;
  int        checks = 0, failures = 0;
  int        c16, f16, c32, f32, d16, d32, ch, fh, cs, fs, dh, ds;
  longint    span16, fed16, span32, fed32, spanh, fedh, spans, feds;
  localparam int S = 512;

  mf_gemm_host #(.DATA_W(16)) u_int16 (
    .clk, .rst_n, .start(start), .m_dim(S), .k_dim(S), .n_dim(S), .mode(MODE_DM),
    .done(done16), .checks(c16), .failures(f16), .n_desc(d16), .span(span16), .fed(fed16)
  );
  mf_gemm_host #(.DATA_W(32)) u_int32 (
    .clk, .rst_n, .start(start), .m_dim(S), .k_dim(S), .n_dim(S), .mode(MODE_DM),
    .done(done32), .checks(c32), .failures(f32), .n_desc(d32), .span(span32), .fed(fed32)
  );
  mf_gemm_host #(.DATA_W(16), .FLOAT(1'b1)) u_fp16 (
    .clk, .rst_n, .start(start), .m_dim(S), .k_dim(S), .n_dim(S), .mode(MODE_DM),
    .done(doneh), .checks(ch), .failures(fh), .n_desc(dh), .span(spanh), .fed(fedh)
  );
  mf_gemm_host #(.DATA_W(32), .FLOAT(1'b1)) u_fp32 (
    .clk, .rst_n, .start(start), .m_dim(S), .k_dim(S), .n_dim(S), .mode(MODE_DM),
    .done(dones), .checks(cs), .failures(fs), .n_desc(ds), .span(spans), .fed(feds)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    @(posedge clk iff (done16 && done32 && doneh && dones));
    @(negedge clk);
    $display("INT16: %0d descriptors, array fed %0d of %0d cycles (%0d%%), %0d checks, %0d failures",
             d16, fed16, span16, 100 * fed16 / span16, c16, f16);
    $display("INT32: %0d descriptors, array fed %0d of %0d cycles (%0d%%), %0d checks, %0d failures",
             d32, fed32, span32, 100 * fed32 / span32, c32, f32);
    $display("FP16:  %0d descriptors, array fed %0d of %0d cycles (%0d%%), %0d checks, %0d failures",
             dh, fedh, spanh, 100 * fedh / spanh, ch, fh);
    $display("FP32:  %0d descriptors, array fed %0d of %0d cycles (%0d%%), %0d checks, %0d failures",
             ds, feds, spans, 100 * feds / spans, cs, fs);
    check(dh == d16 && ds == d32, "FP16 / FP32 tiles as INT16 / INT32");
    check(fedh <= spanh, "FP16: no more than one column per cycle");
    check(2 * feds <= spans + 2 * 64, "FP32: array fed at most half the time");
    check(d16 == (S / 16) * (S / 16) * (S / 128), "INT16: tiles of 16 x 128");
    check(d32 == (S / 16) * (S / 16) * (S / 64),  "INT32: tiles of 16 x 64");
    check(fed16 <= span16, "INT16: no more than one column per cycle");
    check(2 * fed32 <= span32 + 2 * 64, "INT32: array fed at most half the time");
    check(4 * fed32 >= span32, "INT32: array fed at least a quarter of the time");
    checks   += c16 + c32 + ch + cs;
    failures += f16 + f32 + fh + fs;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4000000) @(posedge clk);  // all four run in parallel
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
