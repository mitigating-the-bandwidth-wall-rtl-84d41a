// mf_controller: tile sequencer of the accelerator.
//
// Runs three stages concurrently so that data transfer overlaps computation:
//  * fetch: takes the next released descriptor and starts read channel 0
//    (A tile) and read channel 1 (B tile) into the free half of the double
//    buffer (A0/B0 or A1/B1, selected by fill_sel); when both pages are in,
//    that half is marked full.
//  * compute: when a half is full, reads it column by column (one k per
//    cycle, L cycles per tile pair) into the systolic array. The next full
//    half follows without a gap cycle, so a stream of A/B pairs along K is
//    accumulated back to back. The beat with the last k of a descriptor whose
//    last flag is set tells the array to finish the output tile. A last
//    descriptor only starts if a slot of the output buffer is free.
//  * write-back: the array drains each finished W x W tile into the next slot
//    of the output buffer C (C holds C_SLOTS tiles); each drained slot is
//    handed to a write channel (slots alternate between the two channels)
//    together with the c_addr of its descriptor; the slot is freed when the
//    write channel is done.
// idle is high when no stage holds work. sa_cycles counts cycles in which the
// array was fed, stall_cycles cycles in which work was in flight but the array
// had no tile to take (waiting for the DMA or for a free output slot).
//
// Timing: rd_en/rd_k/rd_sel go to the input buffers; their data arrives one
// cycle later together with sa_valid/sa_last, which are rd_en and the last
// marker delayed by one cycle.
// The double-buffered inputs, one output tile buffer and the
// read A / read B / compute / write C overlap are the paper's; the stage
// hand-shakes, the slot scheme of buffer C and the counters are this design's.
module mf_controller
  import mf_pkg::*;
#(
  parameter int unsigned L       = 256,   // elements per tile row (k per tile)
  parameter int unsigned W       = 16,
  parameter int unsigned C_SLOTS = 4,     // result tiles held by buffer C
  parameter int unsigned C_DEPTH = 64     // beats in buffer C
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // descriptors
  input  logic                           desc_valid,
  input  tile_desc_t                     desc,
  output logic                           desc_pop,
  output logic                           idle,
  output logic [31:0]                    sa_cycles,
  output logic [31:0]                    stall_cycles,
  // DMA read channels: 0 = A, 1 = B
  output logic [1:0]                     rd_start,
  output logic [1:0][ADDR_W-1:0]         rd_addr,
  input  logic [1:0]                     rd_done,
  output logic                           fill_sel,
  // DMA write channels
  output logic [1:0]                     wr_start,
  output logic [1:0][ADDR_W-1:0]         wr_addr,
  output logic [1:0][$clog2(C_DEPTH)-1:0] wr_src,
  input  logic [1:0]                     wr_done,
  // input buffers
  output logic                           rd_en,
  output logic [$clog2(L)-1:0]           rd_k,
  output logic                           rd_sel,
  // systolic array
  output logic                           sa_valid,
  output logic                           sa_last,
  input  logic                           sa_busy,
  input  logic                           sa_out_valid,
  input  logic [$clog2(W)-1:0]           sa_out_row,
  // buffer C write port
  output logic                           cbuf_we,
  output logic [$clog2(C_DEPTH)-1:0]     cbuf_waddr
);

  localparam int unsigned SB  = $clog2(C_SLOTS);
  localparam int unsigned CB  = $clog2(C_DEPTH);
  localparam int unsigned RPS = C_DEPTH / C_SLOTS;   // buffer C words per slot

  // ------------------------------------------------------------------ fetch
  logic                   fetching, got_a, got_b, fp;
  logic [1:0]             full;
  logic [1:0]             meta_last;
  logic [1:0][ADDR_W-1:0] meta_c;
  logic                   fetch_go, fetch_end;

  assign fetch_go  = !fetching && desc_valid && !full[fp];
  assign desc_pop  = fetch_go;
  assign fetch_end = fetching && (got_a || rd_done[0]) && (got_b || rd_done[1]);
  assign rd_start  = {fetch_go, fetch_go};
  assign rd_addr   = {desc.b_addr, desc.a_addr};
  assign fill_sel  = fp;

  // ---------------------------------------------------------------- compute
  logic                   comp, cp;
  logic [$clog2(L)-1:0]   k;
  logic                   last_k, nxt, slot_ok, comp_go, alloc;
  logic [SB:0]            c_used;     // slots allocated and not yet written back
  logic [SB-1:0]          alloc_ptr;
  logic [C_SLOTS-1:0][ADDR_W-1:0] slot_addr;

  assign last_k  = comp && (k == $clog2(L)'(L - 1));
  assign alloc   = last_k && meta_last[cp];
  assign nxt     = comp ? ~cp : cp;
  assign slot_ok = !meta_last[nxt] ||
                   (32'(c_used) + 32'(alloc) < C_SLOTS);
  assign comp_go = (!comp || last_k) && full[nxt] && slot_ok &&
                   !(comp && !last_k);

  assign rd_en  = comp;
  assign rd_k   = k;
  assign rd_sel = cp;

  // ------------------------------------------------------------ write-back
  logic [SB-1:0] drain_ptr, wb_ptr;
  logic [SB:0]   c_ready;
  logic          drained, wb_go, wb_ch;
  logic [1:0]    wb_busy;

  assign cbuf_we    = sa_out_valid;
  assign cbuf_waddr = CB'(32'(drain_ptr) * RPS + 32'(sa_out_row));
  assign drained    = sa_out_valid && (sa_out_row == '0);
  assign wb_ch      = wb_ptr[0];
  assign wb_go      = (c_ready != '0) && !wb_busy[wb_ch];

  always_comb begin
    wr_start = '0;
    wr_start[wb_ch] = wb_go;
  end
  assign wr_addr = {slot_addr[wb_ptr], slot_addr[wb_ptr]};
  assign wr_src  = {CB'(32'(wb_ptr) * RPS), CB'(32'(wb_ptr) * RPS)};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fetching  <= 1'b0;
      got_a     <= 1'b0;
      got_b     <= 1'b0;
      fp        <= 1'b0;
      full      <= '0;
      meta_last <= '0;
      meta_c    <= '0;
      comp      <= 1'b0;
      cp        <= 1'b0;
      k         <= '0;
      c_used    <= '0;
      alloc_ptr <= '0;
      slot_addr <= '0;
      drain_ptr <= '0;
      wb_ptr    <= '0;
      c_ready   <= '0;
      wb_busy   <= '0;
      sa_valid  <= 1'b0;
      sa_last   <= 1'b0;
    end else begin
      // fetch
      if (fetch_go) begin
        fetching      <= 1'b1;
        got_a         <= 1'b0;
        got_b         <= 1'b0;
        meta_last[fp] <= desc.last;
        meta_c[fp]    <= desc.c_addr;
      end else if (fetch_end) begin
        fetching <= 1'b0;
        fp       <= ~fp;
      end else if (fetching) begin
        got_a <= got_a | rd_done[0];
        got_b <= got_b | rd_done[1];
      end
      // compute
      if (comp) k <= k + 1'b1;
      if (last_k) begin
        comp <= 1'b0;
        cp   <= ~cp;
      end
      if (comp_go) begin
        comp <= 1'b1;
        k    <= '0;
        cp   <= nxt;
      end
      // full flags: set by fetch, cleared after the last column was read
      for (int h = 0; h < 2; h++) begin
        if (fetch_end && fp == 1'(h)) full[h] <= 1'b1;
        else if (last_k && cp == 1'(h)) full[h] <= 1'b0;
      end
      if (alloc) begin
        slot_addr[alloc_ptr] <= meta_c[cp];
        alloc_ptr            <= alloc_ptr + 1'b1;
      end
      c_used <= c_used + (SB+1)'(alloc) - (SB+1)'(wr_done[0]) - (SB+1)'(wr_done[1]);
      sa_valid <= comp;
      sa_last  <= alloc;
      // write-back
      if (drained) drain_ptr <= drain_ptr + 1'b1;
      c_ready <= c_ready + (SB+1)'(drained) - (SB+1)'(wb_go);
      if (wb_go) begin
        wb_ptr         <= wb_ptr + 1'b1;
        wb_busy[wb_ch] <= 1'b1;
      end
      for (int c = 0; c < 2; c++) begin
        if (wr_done[c]) wb_busy[c] <= 1'b0;
      end
    end
  end

  assign idle = !fetching && (full == '0) && !comp && !sa_busy &&
                (c_used == '0) && !desc_pop;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sa_cycles    <= '0;
      stall_cycles <= '0;
    end else begin
      if (comp) sa_cycles <= sa_cycles + 1'b1;
      if (!comp && (fetching || full != '0)) stall_cycles <= stall_cycles + 1'b1;
    end
  end

  a_slot_bound: assert property (@(posedge clk) disable iff (!rst_n)
    32'(c_used) <= C_SLOTS);
  a_no_refill: assert property (@(posedge clk) disable iff (!rst_n)
    fetch_end |-> !full[fp]);

endmodule
