// tb_mf_dma: self-checking test of the multi-channel DMA engine.
//
// Two behavioural memories sit on the host port (latency 30 cycles, request
// and write-data ready dropping every 7th cycle) and on the device port
// (latency 5). For each access mode (DM, DC, DevMem) the test starts both
// read channels at once on two random pages, captures every buffer write and
// compares the captured pages with memory; then starts both write channels
// on two result tiles of a random output buffer and compares memory with it.
// Checks also: each page goes out as four 1024-byte read bursts; requests
// carry the coherent attribute in DC mode only; DevMem traffic appears only
// on the device port; the two read channels share the port at full rate, so
// both pages (128 beats) arrive within 128 cycles plus latency and stalls.
`timescale 1ns/1ps
module tb_mf_dma;
  import mf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #0.5 clk = ~clk;

  acc_mode_e mode = MODE_DM;
  logic [1:0] rd_start = 0, rd_busy, rd_done, buf_we, wr_start = 0, wr_busy, wr_done;
  logic [1:0][63:0] rd_addr = '0, wr_addr = '0;
  logic [1:0][5:0] wr_src = '0;
  logic [5:0] buf_waddr, cbuf_raddr;
  logic [511:0] buf_wdata, cbuf_rdata;
  logic cbuf_re;
  logic h_rq_v, h_rq_r, h_rs_v, h_wq_v, h_wq_r, h_wd_v, h_wd_r;
  logic d_rq_v, d_rq_r, d_rs_v, d_wq_v, d_wq_r, d_wd_v, d_wd_r;
  mem_req_t h_rq, h_wq, d_rq, d_wq;
  mem_rsp_t h_rs, d_rs;
  mem_wdat_t h_wd, d_wd;
  int checks = 0, failures = 0;

  mf_dma #(.N_RD(2), .N_WR(2), .C_DEPTH(64), .C_BEATS(16)) dut (
    .clk, .rst_n, .mode, .rd_start, .rd_addr, .rd_busy, .rd_done,
    .buf_we, .buf_waddr, .buf_wdata, .wr_start, .wr_addr, .wr_src, .wr_busy, .wr_done,
    .cbuf_re, .cbuf_raddr, .cbuf_rdata,
    .host_rd_req_valid(h_rq_v), .host_rd_req_ready(h_rq_r), .host_rd_req(h_rq),
    .host_rd_rsp_valid(h_rs_v), .host_rd_rsp(h_rs),
    .host_wr_req_valid(h_wq_v), .host_wr_req_ready(h_wq_r), .host_wr_req(h_wq),
    .host_wr_dat_valid(h_wd_v), .host_wr_dat_ready(h_wd_r), .host_wr_dat(h_wd),
    .dev_rd_req_valid(d_rq_v), .dev_rd_req_ready(d_rq_r), .dev_rd_req(d_rq),
    .dev_rd_rsp_valid(d_rs_v), .dev_rd_rsp(d_rs),
    .dev_wr_req_valid(d_wq_v), .dev_wr_req_ready(d_wq_r), .dev_wr_req(d_wq),
    .dev_wr_dat_valid(d_wd_v), .dev_wr_dat_ready(d_wd_r), .dev_wr_dat(d_wd)
  );

  mf_mem_model #(.LATENCY(30), .STALL_EVERY(7)) u_host (
    .clk, .rst_n, .wr_block(1'b0),
    .rd_req_valid(h_rq_v), .rd_req_ready(h_rq_r), .rd_req(h_rq),
    .rd_rsp_valid(h_rs_v), .rd_rsp(h_rs),
    .wr_req_valid(h_wq_v), .wr_req_ready(h_wq_r), .wr_req(h_wq),
    .wr_dat_valid(h_wd_v), .wr_dat_ready(h_wd_r), .wr_dat(h_wd));
  mf_mem_model #(.LATENCY(5)) u_dev (
    .clk, .rst_n, .wr_block(1'b0),
    .rd_req_valid(d_rq_v), .rd_req_ready(d_rq_r), .rd_req(d_rq),
    .rd_rsp_valid(d_rs_v), .rd_rsp(d_rs),
    .wr_req_valid(d_wq_v), .wr_req_ready(d_wq_r), .wr_req(d_wq),
    .wr_dat_valid(d_wd_v), .wr_dat_ready(d_wd_r), .wr_dat(d_wd));

  // capture of the two tile buffers, model of the output buffer C
  logic [511:0] cap [2][64];
  logic [511:0] cmem [64];
  always @(posedge clk) begin
    for (int c = 0; c < 2; c++) if (buf_we[c]) cap[c][buf_waddr] <= buf_wdata;
    if (cbuf_re) cbuf_rdata <= cmem[cbuf_raddr];
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [511:0] rnd();
    logic [511:0] v;
    for (int i = 0; i < 16; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic run(input acc_mode_e m, input string name);
    longint pa [2];
    longint wa [2];
    int t0, t, hr0, dr0, hc0, hw0, dw0;
    bit dev = (m == MODE_DEVMEM);
    mode = m;
    hr0 = u_host.rd_bursts; dr0 = u_dev.rd_bursts; hc0 = u_host.coherent_reqs;
    hw0 = u_host.wr_bursts; dw0 = u_dev.wr_bursts;
    for (int c = 0; c < 2; c++) begin
      pa[c] = (longint'($urandom) << 12) | (64'(c) << 40);
      for (int b = 0; b < 64; b++) begin
        if (dev) u_dev.poke(pa[c] + b * 64, rnd()); else u_host.poke(pa[c] + b * 64, rnd());
      end
    end
    @(negedge clk);
    rd_addr = {64'(pa[1]), 64'(pa[0])};
    rd_start = 2'b11;
    @(negedge clk);
    rd_start = 2'b00;
    t0 = 0;
    while (rd_busy != 0) begin @(negedge clk); t0++; end
    for (int c = 0; c < 2; c++)
      for (int b = 0; b < 64; b++) begin
        logic [511:0] e;
        e = dev ? u_dev.peek(pa[c] + b * 64) : u_host.peek(pa[c] + b * 64);
        checks++;
        if (cap[c][b] !== e) begin failures++; $display("FAIL %s: ch%0d beat %0d", name, c, b); end
      end
    check(t0 <= 128 + 30 + 40, $sformatf("%s: two pages in %0d cycles", name, t0));
    if (dev) begin
      check(u_dev.rd_bursts - dr0 == 8 && u_host.rd_bursts == hr0, $sformatf("%s: 8 device bursts", name));
    end else begin
      check(u_host.rd_bursts - hr0 == 8 && u_dev.rd_bursts == dr0, $sformatf("%s: 8 host bursts", name));
    end
    check(u_host.max_len == 1024 || dev, "burst length 1024");
    // write-back of two result tiles
    foreach (cmem[i]) cmem[i] = rnd();
    for (int c = 0; c < 2; c++) wa[c] = (longint'($urandom) << 10) | (64'(c) << 44);
    @(negedge clk);
    wr_addr = {64'(wa[1]), 64'(wa[0])};
    wr_src  = {6'd48, 6'd16};
    wr_start = 2'b11;
    @(negedge clk);
    wr_start = 2'b00;
    t = 0;
    while (wr_busy != 0) begin @(negedge clk); t++; end
    for (int c = 0; c < 2; c++)
      for (int b = 0; b < 16; b++) begin
        logic [511:0] got;
        got = dev ? u_dev.peek(wa[c] + b * 64) : u_host.peek(wa[c] + b * 64);
        checks++;
        if (got !== cmem[(c ? 48 : 16) + b]) begin
          failures++; $display("FAIL %s: write ch%0d beat %0d", name, c, b);
        end
      end
    if (dev) check(u_dev.wr_bursts - dw0 == 2 && u_host.wr_bursts == hw0, $sformatf("%s: device writes", name));
    else     check(u_host.wr_bursts - hw0 == 2 && u_dev.wr_bursts == dw0, $sformatf("%s: host writes", name));
    if (m == MODE_DC) check(u_host.coherent_reqs - hc0 == 10, $sformatf("%s: coherent requests", name));
    else              check(u_host.coherent_reqs == hc0, $sformatf("%s: no coherent requests", name));
    check(u_host.len_errors == 0 && u_dev.len_errors == 0, "burst lengths and last flags");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(MODE_DM, "DM");
    run(MODE_DC, "DC");
    run(MODE_DEVMEM, "DevMem");
    run(MODE_DM, "DM again");
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
