// mf_gemm_host: testbench helper that runs whole GEMMs on one accelerator.
//
// Holds an mf_top built for DATA_W-bit elements, a host memory model
// (latency 40 cycles) and a device memory model (latency 10), and plays the
// driver. On a start pulse it takes the shape M x K times K x N and the
// access mode, fills memory with random signed matrices laid out as page
// tiles (A row-major W x L tiles, B row-striped: the W x L tiles of B's
// transpose), zero-padded to whole tiles, and queues one descriptor per
// A-tile x B-tile step, ceil(M/W) * ceil(N/W) * ceil(K/L) in all. The queue
// holds only QDEPTH entries, so the driver polls STATUS and pushes a new
// descriptor (and rings the doorbell for it) whenever there is room, while
// the accelerator is already working. It then waits for the interrupt and
// compares every element of the M x N result with a product computed here
// (32-bit wrap-around, as the accumulators). With FLOAT the elements are
// random IEEE half or single numbers near 1.0 and the expected sums are formed
// term by term in the order the array adds them (k = 0, 1, ...), each product
// and each sum rounded to single precision (mf_fp_ref_pkg), so the results
// must match bit for bit.
//
// Reported on done: the number of checks and failures, the descriptors
// issued, the cycles from the first to the last column read by the array
// (span) and the cycles the array was fed in this run (from SA_CYC). With
// memory that keeps up, span equals the fed cycles: the array never waits.
`timescale 1ns/1ps
module mf_gemm_host
  import mf_pkg::*;
  import mf_fp_ref_pkg::*;
#(
  parameter int unsigned DATA_W = 8,
  parameter bit          FLOAT  = 1'b0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  int         m_dim,
  input  int         k_dim,
  input  int         n_dim,
  input  acc_mode_e  mode,
  output logic       done,
  output int         checks,
  output int         failures,
  output int         n_desc,
  output longint     span,
  output longint     fed
);
  localparam int W  = 16;
  localparam int EB = DATA_W / 8;                  // bytes per element
  localparam int L  = PAGE_BYTES / (W * EB);       // elements per tile row
  localparam longint A_BASE = 64'h1_0000_0000, B_BASE = 64'h2_0000_0000,
                     C_BASE = 64'h3_0000_0000;

  logic        mmio_valid = 1'b0, mmio_we = 1'b0;
  logic [7:0]  mmio_addr = '0;
  logic [63:0] mmio_wdata = '0, mmio_rdata;
  logic        msi, irq_pending;
  logic        h_rq_v, h_rq_r, h_rs_v, h_wq_v, h_wq_r, h_wd_v, h_wd_r;
  logic        d_rq_v, d_rq_r, d_rs_v, d_wq_v, d_wq_r, d_wd_v, d_wd_r;
  mem_req_t    h_rq, h_wq, d_rq, d_wq;
  mem_rsp_t    h_rs, d_rs;
  mem_wdat_t   h_wd, d_wd;

  mf_top #(.DATA_W(DATA_W), .FLOAT(FLOAT)) dut (
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
    .clk, .rst_n, .wr_block(1'b0),
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

  // column reads of the array: first and last cycle of this run
  longint cyc = 0, first_rd = -1, last_rd = -1;
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && dut.rd_en) begin
      if (first_rd < 0) first_rd <= cyc;
      last_rd <= cyc;
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

  function automatic logic [DATA_W-1:0] rnd();
    if (FLOAT) return DATA_W'(rand_fp(DATA_W, 4));
    return DATA_W'($urandom);
  endfunction

  task automatic poke(input bit dev, input longint a, input logic [BEAT_W-1:0] d);
    if (dev) u_dev.poke(a, d);
    else     u_host.poke(a, d);
  endtask

  // Matrices, padded: a[MP][KP], bt[NP][KP] with bt[n][k] = B[k][n]
  logic [DATA_W-1:0] a[][], bt[][];

  // Write all tiles of one padded operand (rows x KP) starting at base:
  // tile (t, kb) at base + (t * KT + kb) * 4096, element (r, e) at byte
  // (r * L + e) * EB of its page.
  task automatic store(input bit dev, input bit is_b, input int tiles, input int kt,
                       input longint base);
    for (int t = 0; t < tiles; t++)
      for (int kb = 0; kb < kt; kb++)
        for (int beat = 0; beat < PAGE_BYTES / BEAT_BYTES; beat++) begin
          logic [BEAT_W-1:0] d;
          for (int e = 0; e < BEAT_W / DATA_W; e++) begin
            int idx = beat * (BEAT_W / DATA_W) + e;   // element index in page
            int r = idx / L, c = idx % L;
            d[e*DATA_W +: DATA_W] = is_b ? bt[t*W + r][kb*L + c] : a[t*W + r][kb*L + c];
          end
          poke(dev, base + longint'((t * kt + kb) * PAGE_BYTES + beat * BEAT_BYTES), d);
        end
  endtask

  initial begin
    done = 1'b0; checks = 0; failures = 0; n_desc = 0; span = 0; fed = 0;
    forever begin
      int mt, nt, kt, mp, np, kp, bad, pushed;
      bit dev;
      logic [63:0] st, fed0;
      @(posedge clk iff start);
      done = 1'b0;
      dev  = (mode == MODE_DEVMEM);
      mt = (m_dim + W - 1) / W;  nt = (n_dim + W - 1) / W;  kt = (k_dim + L - 1) / L;
      mp = mt * W;  np = nt * W;  kp = kt * L;
      a  = new[mp];  foreach (a[i])  a[i]  = new[kp];
      bt = new[np];  foreach (bt[i]) bt[i] = new[kp];
      for (int i = 0; i < mp; i++) for (int k = 0; k < kp; k++)
        a[i][k] = (i < m_dim && k < k_dim) ? rnd() : '0;
      for (int j = 0; j < np; j++) for (int k = 0; k < kp; k++)
        bt[j][k] = (j < n_dim && k < k_dim) ? rnd() : '0;
      store(dev, 1'b0, mt, kt, A_BASE);
      store(dev, 1'b1, nt, kt, B_BASE);
      for (int t = 0; t < mt * nt * W * W * 4 / BEAT_BYTES; t++)
        poke(dev, C_BASE + longint'(t * BEAT_BYTES), '0);

      mmio_wr(8'h00, 64'(mode));
      mmio_rd(8'h40, fed0);
      first_rd = -1;
      pushed = 0;
      for (int i = 0; i < mt; i++)
        for (int j = 0; j < nt; j++)
          for (int k = 0; k < kt; k++) begin
            do mmio_rd(8'h08, st); while (st[15:8] >= 8'd16);
            mmio_wr(8'h10, A_BASE + longint'((i * kt + k) * PAGE_BYTES));
            mmio_wr(8'h18, B_BASE + longint'((j * kt + k) * PAGE_BYTES));
            mmio_wr(8'h20, C_BASE + longint'((i * nt + j) * 1024));
            mmio_wr(8'h28, 64'(k == kt - 1));
            mmio_wr(8'h30, 1);
            pushed++;
          end
      while (!irq_pending) @(posedge clk);
      mmio_wr(8'h38, 1);
      mmio_rd(8'h40, st);
      fed    = longint'(st[31:0] - fed0[31:0]);
      span   = last_rd - first_rd + 1;
      n_desc = pushed;
      checks++;
      if (fed != longint'(pushed) * L) begin
        failures++;
        $display("FAIL %0dx%0dx%0d: array fed %0d cycles, expected %0d", m_dim, k_dim, n_dim,
                 fed, pushed * L);
      end

      bad = 0;
      for (int i = 0; i < m_dim; i++)
        for (int j = 0; j < n_dim; j++) begin
          logic [BEAT_W-1:0] d;
          logic [31:0] exp;
          longint ad;
          ad  = C_BASE + longint'(((i / W) * nt + j / W) * 1024 + (i % W) * BEAT_BYTES);
          d   = dev ? u_dev.peek(ad) : u_host.peek(ad);
          exp = 0;
          for (int k = 0; k < k_dim; k++)
            if (FLOAT) exp = add(exp, mul(32'(a[i][k]), 32'(bt[j][k]), DATA_W));
            else       exp += 32'(int'($signed(a[i][k])) * int'($signed(bt[j][k])));
          checks++;
          if (d[(j % W)*32 +: 32] !== 32'(exp)) begin
            failures++;
            if (bad++ < 5) $display("FAIL %0dx%0dx%0d %s%0d: C[%0d][%0d] = %h, expected %h",
                                    m_dim, k_dim, n_dim, FLOAT ? "FP" : "INT", DATA_W, i, j,
                                    d[(j % W)*32 +: 32], exp);
          end
        end
      done = 1'b1;
    end
  end

endmodule
