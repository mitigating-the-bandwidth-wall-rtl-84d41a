// tb_mf_top: end-to-end test of the accelerator at its default size
// (16 x 16 INT8 array, 4 KB tiles of 16 x 256).
//
// Plays the driver: fills memory with random INT8 matrices laid out as page
// tiles (A row-major, B row-striped), queues one descriptor per
// A-tile x B-tile step of a blocked GEMM, rings the doorbell and waits for the
// interrupt, then compares every result with a product computed here from the
// same random matrices. The GEMM is M = N = 32, K = 512: 2 x 2 result tiles,
// each accumulated over 2 k-tiles, 8 descriptors. It runs four times:
//   1. DM mode (host port, non-coherent), memory fast enough that the array
//      must be fed without a single gap between the 8 tile pairs (checked:
//      the L-cycle tiles follow back to back);
//   2. DC mode (host port, coherent requests);
//   3. DevMem mode (device-memory port only);
//   4. DM mode, the GEMM queued twice (16 descriptors, 8 result tiles), with
//      host writes held off for a while, so that all four output slots fill
//      and the array has to wait for write-back.
// Counted mechanisms, each must occur: fetch overlapping compute (double
// buffering), tile pairs accumulated back to back, array stall waiting for
// data, output-slot back-pressure, the three access modes, burst splitting of
// a page into 1024-byte bursts, the completion interrupt.
`timescale 1ns/1ps
module tb_mf_top;
  import mf_pkg::*;

  localparam int W = 16, L = 256, MT = 2, NT = 2, KT = 2;
  localparam int M = MT * W, N = NT * W, K = KT * L;
  localparam longint A_BASE = 64'h1_0000_0000, B_BASE = 64'h2_0000_0000,
                     C_BASE = 64'h3_0000_0000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #0.5 clk = ~clk;   // 1 GHz

  logic        mmio_valid = 1'b0, mmio_we = 1'b0;
  logic [7:0]  mmio_addr = '0;
  logic [63:0] mmio_wdata = '0, mmio_rdata;
  logic        msi, irq_pending;
  logic        h_rq_v, h_rq_r, h_rs_v, h_wq_v, h_wq_r, h_wd_v, h_wd_r;
  logic        d_rq_v, d_rq_r, d_rs_v, d_wq_v, d_wq_r, d_wd_v, d_wd_r;
  mem_req_t    h_rq, h_wq, d_rq, d_wq;
  mem_rsp_t    h_rs, d_rs;
  mem_wdat_t   h_wd, d_wd;
  logic        h_block = 1'b0;

  mf_top dut (
    .clk, .rst_n, .mmio_valid, .mmio_we, .mmio_addr, .mmio_wdata, .mmio_rdata,
    .msi, .irq_pending,
    .host_rd_req_valid(h_rq_v), .host_rd_req_ready(h_rq_r), .host_rd_req(h_rq),
    .host_rd_rsp_valid(h_rs_v), .host_rd_rsp(h_rs),
    .host_wr_req_valid(h_wq_v), .host_wr_req_ready(h_wq_r), .host_wr_req(h_wq),
    .host_wr_dat_valid(h_wd_v), .host_wr_dat_ready(h_wd_r), .host_wr_dat(h_wd),
    .dev_rd_req_valid(d_rq_v), .dev_rd_req_ready(d_rq_r), .dev_rd_req(d_rq),
    .dev_rd_rsp_valid(d_rs_v), .dev_rd_rsp(d_rs),
    .dev_wr_req_valid(d_wq_v), .dev_wr_req_ready(d_wq_r), .dev_wr_req(d_wq),
    .dev_wr_dat_valid(d_wd_v), .dev_wr_dat_ready(d_wd_r), .dev_wr_dat(d_wd)
  );

  mf_mem_model #(.LATENCY(40)) u_host (
    .clk, .rst_n, .wr_block(h_block),
    .rd_req_valid(h_rq_v), .rd_req_ready(h_rq_r), .rd_req(h_rq),
    .rd_rsp_valid(h_rs_v), .rd_rsp(h_rs),
    .wr_req_valid(h_wq_v), .wr_req_ready(h_wq_r), .wr_req(h_wq),
    .wr_dat_valid(h_wd_v), .wr_dat_ready(h_wd_r), .wr_dat(h_wd)
  );
  mf_mem_model #(.LATENCY(10)) u_dev (
    .clk, .rst_n, .wr_block(1'b0),
    .rd_req_valid(d_rq_v), .rd_req_ready(d_rq_r), .rd_req(d_rq),
    .rd_rsp_valid(d_rs_v), .rd_rsp(d_rs),
    .wr_req_valid(d_wq_v), .wr_req_ready(d_wq_r), .wr_req(d_wq),
    .wr_dat_valid(d_wd_v), .wr_dat_ready(d_wd_r), .wr_dat(d_wd)
  );

  int checks = 0, failures = 0;
  byte A [M][K];
  byte Bt[N][K];     // B transposed: Bt[n][k] = B[k][n]

  // ------------------------------------------------------------ mechanisms
  int n_overlap = 0, n_b2b = 0, n_slot_bp = 0, n_msi = 0, n_sa_stall = 0;
  longint cyc = 0;
  longint first_rd = -1, last_rd = -1;
  int     rd_cycles = 0;
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && dut.u_ctrl.fetching && dut.u_ctrl.comp) n_overlap <= n_overlap + 1;
    if (rst_n && dut.u_ctrl.last_k && dut.u_ctrl.comp_go) n_b2b <= n_b2b + 1;
    if (rst_n && (!dut.u_ctrl.comp || dut.u_ctrl.last_k) && dut.u_ctrl.full[dut.u_ctrl.nxt] &&
        !dut.u_ctrl.slot_ok) n_slot_bp <= n_slot_bp + 1;
    if (rst_n && msi) n_msi <= n_msi + 1;
    if (rst_n && dut.rd_en) begin
      if (first_rd < 0) first_rd <= cyc;
      last_rd   <= cyc;
      rd_cycles <= rd_cycles + 1;
    end
  end

  task automatic mmio_wr(input logic [7:0] a, input logic [63:0] d);
    @(negedge clk);
    mmio_valid = 1'b1; mmio_we = 1'b1; mmio_addr = a; mmio_wdata = d;
    @(negedge clk);
    mmio_valid = 1'b0; mmio_we = 1'b0;
  endtask

  task automatic mmio_rd(input logic [7:0] a, output logic [63:0] d);
    @(negedge clk);
    mmio_valid = 1'b1; mmio_we = 1'b0; mmio_addr = a;
    #0.1 d = mmio_rdata;
    @(negedge clk);
    mmio_valid = 1'b0;
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Lay the matrices out as page tiles in one memory model.
  task automatic load_mem(input bit dev);
    for (int i = 0; i < MT; i++)
      for (int k = 0; k < KT; k++)
        for (int b = 0; b < 64; b++) begin
          logic [BEAT_W-1:0] d;
          for (int e = 0; e < 64; e++) begin
            int byte_off = b * 64 + e;
            d[e*8 +: 8] = A[i*W + byte_off / L][k*L + byte_off % L];
          end
          if (dev) u_dev.poke(A_BASE + (i*KT + k) * 4096 + b * 64, d);
          else     u_host.poke(A_BASE + (i*KT + k) * 4096 + b * 64, d);
        end
    for (int j = 0; j < NT; j++)
      for (int k = 0; k < KT; k++)
        for (int b = 0; b < 64; b++) begin
          logic [BEAT_W-1:0] d;
          for (int e = 0; e < 64; e++) begin
            int byte_off = b * 64 + e;
            d[e*8 +: 8] = Bt[j*W + byte_off / L][k*L + byte_off % L];
          end
          if (dev) u_dev.poke(B_BASE + (j*KT + k) * 4096 + b * 64, d);
          else     u_host.poke(B_BASE + (j*KT + k) * 4096 + b * 64, d);
        end
  endtask

  task automatic clear_c(input bit dev);
    for (int t = 0; t < 2 * MT * NT * 16; t++) begin
      if (dev) u_dev.poke(C_BASE + t * 64, '0);
      else     u_host.poke(C_BASE + t * 64, '0);
    end
  endtask

  task automatic run_gemm(input acc_mode_e mode, input bit dev, input string name,
                          input int reps = 1);
    logic [63:0] st;
    int bad, msi0;
    bad  = 0;
    msi0 = n_msi;
    mmio_wr(8'h00, 64'(mode));
    for (int rep = 0; rep < reps; rep++)
    for (int i = 0; i < MT; i++)
      for (int j = 0; j < NT; j++)
        for (int k = 0; k < KT; k++) begin
          mmio_wr(8'h10, A_BASE + (i*KT + k) * 4096);
          mmio_wr(8'h18, B_BASE + (j*KT + k) * 4096);
          mmio_wr(8'h20, C_BASE + rep * 4096 + (i*NT + j) * 1024);
          mmio_wr(8'h28, 64'(k == KT - 1));
        end
    mmio_rd(8'h08, st);
    check(st[15:8] == 8'(reps*MT*NT*KT), $sformatf("%s: queue holds %0d descriptors", name, st[15:8]));
    first_rd = -1; rd_cycles = 0;
    mmio_wr(8'h30, reps*MT*NT*KT);
    while (!irq_pending) @(posedge clk);
    @(negedge clk);
    check(n_msi == msi0 + 1, $sformatf("%s: one MSI pulse", name));
    mmio_wr(8'h38, 1);
    mmio_rd(8'h38, st);
    check(st[0] == 1'b0, $sformatf("%s: interrupt acknowledged", name));
    check(rd_cycles == reps*MT*NT*KT*L, $sformatf("%s: array fed %0d cycles", name, rd_cycles));
    for (int rep = 0; rep < reps; rep++)
    for (int i = 0; i < MT; i++)
      for (int j = 0; j < NT; j++)
        for (int r = 0; r < W; r++) begin
          logic [BEAT_W-1:0] d;
          d = dev ? u_dev.peek(C_BASE + rep * 4096 + (i*NT + j) * 1024 + r * 64)
                  : u_host.peek(C_BASE + rep * 4096 + (i*NT + j) * 1024 + r * 64);
          for (int c = 0; c < W; c++) begin
            int exp = 0;
            for (int kk = 0; kk < K; kk++) exp += int'(A[i*W + r][kk]) * int'(Bt[j*W + c][kk]);
            checks++;
            if (d[c*32 +: 32] !== 32'(exp)) begin
              failures++;
              if (bad++ < 5) $display("FAIL %s: C[%0d][%0d] = %0d, expected %0d", name,
                                      i*W + r, j*W + c, $signed(d[c*32 +: 32]), exp);
            end
          end
        end
    $display("%s: done at cycle %0d, %0d result elements compared", name, cyc, reps*M*N);
  endtask

  initial begin
    logic [63:0] v;
    int h_coh0, h_rd0, d_rd0;
    for (int m = 0; m < M; m++) for (int k = 0; k < K; k++) A[m][k]  = byte'($urandom);
    for (int n = 0; n < N; n++) for (int k = 0; k < K; k++) Bt[n][k] = byte'($urandom);
    load_mem(0); load_mem(1);
    repeat (5) @(posedge clk);
    rst_n = 1'b1;

    // 1. DM
    clear_c(0);
    run_gemm(MODE_DM, 0, "DM");
    check(last_rd - first_rd + 1 == MT*NT*KT*L,
          $sformatf("DM: %0d tile pairs took %0d cycles, expected back to back %0d",
                    MT*NT*KT, last_rd - first_rd + 1, MT*NT*KT*L));
    check(u_host.rd_bursts == 2 * MT*NT*KT * 4, $sformatf("DM: %0d read bursts", u_host.rd_bursts));
    check(u_host.max_len == 1024 && u_host.len_errors == 0, "DM: bursts of 1024 bytes at most");
    check(u_host.coherent_reqs == 0, "DM: no coherent requests");
    check(u_host.wr_bursts == MT*NT, $sformatf("DM: %0d write bursts", u_host.wr_bursts));
    mmio_rd(8'h40, v);
    check(v[31:0] == 32'(MT*NT*KT*L), $sformatf("SA_CYC register = %0d", v[31:0]));
    mmio_rd(8'h48, v);
    n_sa_stall = int'(v[31:0]);

    // 2. DC
    clear_c(0);
    h_rd0 = u_host.rd_bursts;
    run_gemm(MODE_DC, 0, "DC");
    check(u_host.coherent_reqs == (u_host.rd_bursts - h_rd0) + MT*NT,
          $sformatf("DC: all %0d requests coherent", u_host.coherent_reqs));

    // 3. DevMem
    clear_c(1);
    h_rd0 = u_host.rd_bursts; d_rd0 = u_dev.rd_bursts;
    run_gemm(MODE_DEVMEM, 1, "DevMem");
    check(u_host.rd_bursts == h_rd0, "DevMem: no host traffic");
    check(u_dev.rd_bursts - d_rd0 == 2 * MT*NT*KT * 4, "DevMem: all reads on the device port");

    // 4. DM with write-back held off
    clear_c(0);
    fork
      begin
        @(posedge dut.rd_en);
        h_block = 1'b1;
        repeat (3000) @(posedge clk);
        h_block = 1'b0;
      end
    join_none
    run_gemm(MODE_DM, 0, "DM-held", 2);
    mmio_rd(8'h48, v);
    n_sa_stall = int'(v[31:0]);

    $display("mechanisms: overlap=%0d back_to_back=%0d sa_stall=%0d slot_backpressure=%0d msi=%0d",
             n_overlap, n_b2b, n_sa_stall, n_slot_bp, n_msi);
    check(n_overlap > 0, "double-buffered fetch overlapped compute");
    check(n_b2b > 0, "tile pairs streamed back to back");
    check(n_sa_stall > 0, "array waited for data");
    check(n_slot_bp > 0, "output slots applied back-pressure");
    check(n_msi == 4, "one interrupt per batch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
