// tb_mf_controller: self-checking test of the tile sequencer.
//
// Surrounds the controller with simple models: a descriptor source, a DMA
// whose read channels report done after a random delay, a systolic array
// model that drains W rows 2W cycles after a last beat, and write channels
// that finish after a random delay. 24 descriptors (result tiles of 1 to 3
// k-steps) run in two phases: fast DMA (fetch shorter than one tile compute)
// and slow DMA (fetch longer). Checks: tiles are read k = 0..L-1 from the
// half that was filled for them, the halves alternate, the last marker comes
// only with the final k of a last descriptor, sa_valid follows rd_en by one
// cycle; with fast DMA consecutive tiles are read without a gap cycle; drained
// rows go to the right slot of buffer C; every result tile is handed to a
// write channel with its own c_addr and slot, channels alternating; no more
// than 4 tiles wait in C; the controller ends idle and the cycle counters
// match what was observed.
`timescale 1ns/1ps
module tb_mf_controller;
  import mf_pkg::*;
  localparam int L = 256, W = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #0.5 clk = ~clk;

  logic desc_valid, desc_pop, idle, fill_sel, rd_en, rd_sel, sa_valid, sa_last;
  tile_desc_t desc;
  logic [31:0] sa_cycles, stall_cycles;
  logic [1:0] rd_start, rd_done, wr_start, wr_done;
  logic [1:0][63:0] rd_addr, wr_addr;
  logic [1:0][5:0] wr_src;
  logic [7:0] rd_k;
  logic sa_busy, sa_out_valid, cbuf_we;
  logic [3:0] sa_out_row;
  logic [5:0] cbuf_waddr;

  mf_controller #(.L(L), .W(W), .C_SLOTS(4), .C_DEPTH(64)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  tile_desc_t q [$];
  tile_desc_t issued [$];      // descriptors in fetch order
  longint     c_expect [$];    // c_addr of last descriptors, in order
  assign desc_valid = (q.size() != 0);
  assign desc = q.size() != 0 ? q[0] : '0;

  int dma_min = 20, dma_max = 100;
  longint cyc = 0;

  // --- DMA read channel model
  int rd_cnt [2] = '{-1, -1};
  logic half_of [$];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    rd_done <= '0;
    if (desc_pop) begin
      issued.push_back(q[0]);
      half_of.push_back(fill_sel);
      if (rd_addr[0] != q[0].a_addr || rd_addr[1] != q[0].b_addr) begin
        failures++; $display("FAIL: read addresses");
      end
      checks++;
      if (rd_start != 2'b11) begin failures++; $display("FAIL: both channels start"); end
      checks++;
      void'(q.pop_front());
      rd_cnt[0] <= $urandom_range(dma_min, dma_max);
      rd_cnt[1] <= $urandom_range(dma_min, dma_max);
    end
    for (int c = 0; c < 2; c++) begin
      if (rd_cnt[c] == 0) rd_done[c] <= 1'b1;
      if (rd_cnt[c] >= 0 && !desc_pop) rd_cnt[c] <= rd_cnt[c] - 1;
    end
  end

  // --- compute observation
  int     tile_idx = 0, kk = 0, gaps = 0, rd_total = 0;
  logic   prev_rd_en = 0, prev_last = 0;
  longint last_at [$];
  always @(posedge clk) if (rst_n) begin
    check(sa_valid == prev_rd_en, "sa_valid one cycle after rd_en");
    check(sa_last == prev_last, "sa_last one cycle after last read");
    prev_rd_en <= rd_en;
    prev_last  <= rd_en && rd_k == 8'(L - 1) && issued[tile_idx].last;
    if (rd_en) begin
      rd_total++;
      if (rd_k != 8'(kk)) begin failures++; $display("FAIL: tile %0d k %0d expected %0d", tile_idx, rd_k, kk); end
      checks++;
      if (rd_sel != half_of[tile_idx]) begin failures++; $display("FAIL: tile %0d read from wrong half", tile_idx); end
      checks++;
      if (kk == L - 1) begin
        kk = 0;
        tile_idx++;
      end else kk++;
    end else if (kk == 0 && tile_idx > 0 && prev_rd_en && dma_max < L - 50 &&
                 tile_idx < issued.size()) begin
      gaps++;
    end
  end

  // --- systolic array model: drain 2W cycles after a last beat
  longint drain_at [$];
  int     drow = -1;
  always @(posedge clk) begin
    if (sa_last) drain_at.push_back(cyc + 2 * W - 1);
    if (drow < 0 && drain_at.size() != 0 && drain_at[0] == cyc) begin
      drow <= W - 1;
      void'(drain_at.pop_front());
    end else if (drow >= 0) drow <= drow - 1;
  end
  assign sa_out_valid = (drow >= 0);
  assign sa_out_row   = 4'(drow < 0 ? 0 : drow);
  assign sa_busy      = sa_valid || (drain_at.size() != 0) || (drow >= 0);

  int drained = 0;
  always @(posedge clk) if (cbuf_we) begin
    check(cbuf_waddr == 6'((drained % 4) * 16 + sa_out_row), "drain address in buffer C");
    if (sa_out_row == 0) drained++;
  end

  // --- write channel model
  int wr_cnt [2] = '{-1, -1};
  int written = 0, wb_issued = 0;
  always @(posedge clk) begin
    wr_done <= '0;
    for (int c = 0; c < 2; c++) begin
      if (wr_start[c]) begin
        check(c == wb_issued % 2, "write channels alternate");
        check(wr_addr[c] == 64'(c_expect[wb_issued]), $sformatf("write %0d address", wb_issued));
        check(wr_src[c] == 6'((wb_issued % 4) * 16), $sformatf("write %0d source slot", wb_issued));
        wb_issued++;
        wr_cnt[c] <= $urandom_range(dma_min, 2 * dma_max);
      end else if (wr_cnt[c] == 0) begin
        wr_done[c] <= 1'b1;
        written++;
        wr_cnt[c] <= -1;
      end else if (wr_cnt[c] > 0) wr_cnt[c] <= wr_cnt[c] - 1;
    end
    check(drained - written <= 4, "at most four tiles held in buffer C");
  end

  int ndesc = 0;
  task automatic add_tiles(input int n);
    for (int t = 0; t < n; t++) begin
      int ks = $urandom_range(1, 3);
      longint ca = 64'h9000_0000 + 64'h400 * c_expect.size();
      for (int k = 0; k < ks; k++) begin
        tile_desc_t d;
        d.a_addr = 64'h1000_0000 + 64'h1000 * ndesc;
        d.b_addr = 64'h2000_0000 + 64'h1000 * ndesc;
        d.c_addr = 64'(ca);
        d.last   = (k == ks - 1);
        q.push_back(d);
        ndesc++;
      end
      c_expect.push_back(ca);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // phase 1: fast DMA, tiles must stream without gaps
    dma_min = 20; dma_max = 150;
    add_tiles(6);
    wait (q.size() == 0);
    while (!idle) @(negedge clk);
    check(gaps == 0, $sformatf("fast fetch: %0d gaps between tiles", gaps));
    // phase 2: slow DMA
    dma_min = 200; dma_max = 600;
    add_tiles(6);
    @(negedge clk);
    while (!(idle && q.size() == 0)) @(negedge clk);
    repeat (5) @(negedge clk);
    check(rd_total == ndesc * L, $sformatf("%0d read cycles for %0d tiles", rd_total, ndesc));
    check(sa_cycles == 32'(rd_total), "sa_cycles counter");
    check(stall_cycles > 0, "stall counter counted slow fetches");
    check(written == c_expect.size(), $sformatf("%0d of %0d tiles written", written, c_expect.size()));
    check(idle, "idle at the end");
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
