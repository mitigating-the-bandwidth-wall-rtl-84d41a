// mf_dma: multi-channel DMA engine between the accelerator's tile buffers and
// memory.
//
// Read channels (N_RD, default 2: channel 0 fetches A tiles, channel 1 fetches
// B tiles) each move one page (PAGE_BYTES) from memory into a tile buffer.
// A started channel splits its page into BURST_BYTES bursts and issues them as
// fast as the memory port accepts; the two channels share the request port
// round robin. Read data returns as 64-byte beats tagged with the channel, in
// order within a channel, and is written straight into that channel's buffer
// (buf_we/buf_waddr, data on buf_wdata). A channel reports rd_done for one
// cycle when its last beat has been stored.
//
// Write channels (N_WR, default 2) each move one result tile of C_BEATS beats
// from the output buffer C, starting at beat wr_src, to memory. The write port
// serves one burst at a time, round robin over the channels: the request
// (address, length) goes out first, then the beats, read from C through a
// small prefetch queue so that one beat leaves per cycle. wr_done pulses when
// the last beat of a channel's tile has been accepted (writes are posted).
//
// Access mode (held stable while the engine is busy): DM sends requests to the
// host port with coherent = 0, DC sends them with coherent = 1, DEVMEM sends
// them to the device-memory port. The host port stands for the PCIe interface,
// whose link, root complex and SMMU translation lie outside this design.
//
// From the paper: 2 read / 2 write channels, 1024-byte bursts, page-sized
// transfers with one descriptor per tile, the DM / DC / DevMem paths. This
// design's choices: the request/beat port protocol, tags, round-robin
// arbitration and the coherent attribute as the DM/DC distinction.
module mf_dma
  import mf_pkg::*;
#(
  parameter int unsigned N_RD        = 2,
  parameter int unsigned N_WR        = 2,
  parameter int unsigned PAGE        = PAGE_BYTES,
  parameter int unsigned BURST       = BURST_BYTES,
  parameter int unsigned C_DEPTH     = 64,     // beats in the output buffer
  parameter int unsigned C_BEATS     = 16,     // beats in one result tile
  // derived
  parameter int unsigned PAGE_BEATS  = PAGE / BEAT_BYTES,
  parameter int unsigned BURST_BEATS = BURST / BEAT_BYTES
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  acc_mode_e                         mode,

  // read channels
  input  logic [N_RD-1:0]                   rd_start,
  input  logic [N_RD-1:0][ADDR_W-1:0]       rd_addr,
  output logic [N_RD-1:0]                   rd_busy,
  output logic [N_RD-1:0]                   rd_done,
  output logic [N_RD-1:0]                   buf_we,
  output logic [$clog2(PAGE_BEATS)-1:0]     buf_waddr,
  output logic [BEAT_W-1:0]                 buf_wdata,

  // write channels
  input  logic [N_WR-1:0]                   wr_start,
  input  logic [N_WR-1:0][ADDR_W-1:0]       wr_addr,
  input  logic [N_WR-1:0][$clog2(C_DEPTH)-1:0] wr_src,
  output logic [N_WR-1:0]                   wr_busy,
  output logic [N_WR-1:0]                   wr_done,
  output logic                              cbuf_re,
  output logic [$clog2(C_DEPTH)-1:0]        cbuf_raddr,
  input  logic [BEAT_W-1:0]                 cbuf_rdata,

  // host memory port (through PCIe)
  output logic                              host_rd_req_valid,
  input  logic                              host_rd_req_ready,
  output mem_req_t                          host_rd_req,
  input  logic                              host_rd_rsp_valid,
  input  mem_rsp_t                          host_rd_rsp,
  output logic                              host_wr_req_valid,
  input  logic                              host_wr_req_ready,
  output mem_req_t                          host_wr_req,
  output logic                              host_wr_dat_valid,
  input  logic                              host_wr_dat_ready,
  output mem_wdat_t                         host_wr_dat,

  // device-side memory port
  output logic                              dev_rd_req_valid,
  input  logic                              dev_rd_req_ready,
  output mem_req_t                          dev_rd_req,
  input  logic                              dev_rd_rsp_valid,
  input  mem_rsp_t                          dev_rd_rsp,
  output logic                              dev_wr_req_valid,
  input  logic                              dev_wr_req_ready,
  output mem_req_t                          dev_wr_req,
  output logic                              dev_wr_dat_valid,
  input  logic                              dev_wr_dat_ready,
  output mem_wdat_t                         dev_wr_dat
);

  localparam int unsigned NBURST = PAGE / BURST;
  localparam int unsigned PB     = $clog2(PAGE_BEATS);
  localparam int unsigned CB     = $clog2(C_DEPTH);

  logic use_dev, coherent;
  assign use_dev  = (mode == MODE_DEVMEM);
  assign coherent = (mode == MODE_DC);

  // ================================================================ read side
  logic [N_RD-1:0][$clog2(NBURST):0] rd_issue_left;
  logic [N_RD-1:0][ADDR_W-1:0]       rd_next_addr;
  logic [N_RD-1:0][PB:0]             rd_beats;
  logic [N_RD-1:0]                   rd_want;
  logic [$clog2(N_RD > 1 ? N_RD : 2)-1:0] rd_rr, rd_sel;
  logic                              rd_any, rd_req_valid, rd_req_ready;
  mem_req_t                          rd_req;

  for (genvar c = 0; c < N_RD; c++) begin : g_rdwant
    assign rd_want[c] = (rd_issue_left[c] != '0);
  end

  // round robin pick, starting after the last granted channel
  always_comb begin
    rd_sel = rd_rr;
    rd_any = 1'b0;
    for (int n = N_RD; n >= 1; n--) begin
      int unsigned c;
      c = (int'(rd_rr) + n) % N_RD;
      if (rd_want[c]) begin
        rd_sel = $bits(rd_sel)'(c);
        rd_any = 1'b1;
      end
    end
  end

  assign rd_req_valid  = rd_any;
  assign rd_req.addr     = rd_next_addr[rd_sel];
  assign rd_req.len      = LEN_W'(BURST);
  assign rd_req.tag      = TAG_W'(rd_sel);
  assign rd_req.coherent = coherent;

  assign host_rd_req_valid = rd_req_valid && !use_dev;
  assign dev_rd_req_valid  = rd_req_valid &&  use_dev;
  assign host_rd_req       = rd_req;
  assign dev_rd_req        = rd_req;
  assign rd_req_ready      = use_dev ? dev_rd_req_ready : host_rd_req_ready;

  // responses: only the port of the current mode carries traffic
  logic     rsp_valid;
  mem_rsp_t rsp;
  assign rsp_valid = host_rd_rsp_valid | dev_rd_rsp_valid;
  assign rsp       = host_rd_rsp_valid ? host_rd_rsp : dev_rd_rsp;
  logic [$clog2(N_RD > 1 ? N_RD : 2)-1:0] rtag;
  assign rtag = $bits(rtag)'(rsp.tag);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_issue_left <= '0;
      rd_next_addr  <= '0;
      rd_beats      <= '0;
      rd_busy       <= '0;
      rd_done       <= '0;
      rd_rr         <= '0;
    end else begin
      rd_done <= '0;
      for (int c = 0; c < N_RD; c++) begin
        if (rd_start[c] && !rd_busy[c]) begin
          rd_issue_left[c] <= ($clog2(NBURST)+1)'(NBURST);
          rd_next_addr[c]  <= rd_addr[c];
          rd_beats[c]      <= '0;
          rd_busy[c]       <= 1'b1;
        end
      end
      if (rd_req_valid && rd_req_ready) begin
        rd_issue_left[rd_sel] <= rd_issue_left[rd_sel] - 1'b1;
        rd_next_addr[rd_sel]  <= rd_next_addr[rd_sel] + ADDR_W'(BURST);
        rd_rr                 <= rd_sel;
      end
      if (rsp_valid) begin
        rd_beats[rtag] <= rd_beats[rtag] + 1'b1;
        if (rd_beats[rtag] == (PB+1)'(PAGE_BEATS - 1)) begin
          rd_busy[rtag] <= 1'b0;
          rd_done[rtag] <= 1'b1;
        end
      end
    end
  end

  always_comb begin
    buf_we = '0;
    if (rsp_valid) buf_we[rtag] = 1'b1;
  end
  assign buf_waddr = rd_beats[rtag][PB-1:0];
  assign buf_wdata = rsp.data;

  // =============================================================== write side
  typedef enum logic [1:0] {W_IDLE, W_REQ, W_DATA} wstate_e;
  wstate_e                            wst;
  logic [N_WR-1:0][ADDR_W-1:0]        w_addr;
  logic [N_WR-1:0][CB-1:0]            w_src;
  logic [N_WR-1:0][$clog2(C_BEATS):0] w_left;     // beats not yet requested
  logic [$clog2(N_WR > 1 ? N_WR : 2)-1:0] w_cur;
  logic [$clog2(BURST_BEATS):0]       w_blen;     // beats in the current burst
  logic [$clog2(BURST_BEATS):0]       w_rd_left;  // C reads still to issue
  logic [$clog2(BURST_BEATS):0]       w_tx_left;  // beats still to send
  logic                               w_inflight;
  logic                               w_dat_valid, w_dat_ready, w_req_ready;
  logic [$clog2(N_WR > 1 ? N_WR : 2)-1:0] w_pick;
  logic                               w_any;
  logic                               pq_pop, pq_empty, pq_full;
  logic [2:0]                         pq_count;
  logic [BEAT_W-1:0]                  pq_dout;

  always_comb begin
    w_pick = w_cur;
    w_any  = 1'b0;
    for (int n = N_WR; n >= 1; n--) begin
      int unsigned c;
      c = (int'(w_cur) + n) % N_WR;
      if (w_left[c] != '0) begin
        w_pick = $bits(w_pick)'(c);
        w_any  = 1'b1;
      end
    end
  end

  assign w_req_ready = use_dev ? dev_wr_req_ready : host_wr_req_ready;
  assign w_dat_ready = use_dev ? dev_wr_dat_ready : host_wr_dat_ready;

  mem_req_t w_req;
  assign w_req.addr     = w_addr[w_cur];
  assign w_req.len      = LEN_W'(32'(w_blen) * BEAT_BYTES);
  assign w_req.tag      = TAG_W'(w_cur);
  assign w_req.coherent = coherent;
  assign host_wr_req_valid = (wst == W_REQ) && !use_dev;
  assign dev_wr_req_valid  = (wst == W_REQ) &&  use_dev;
  assign host_wr_req       = w_req;
  assign dev_wr_req        = w_req;

  // prefetch C beats: keep at most 4 beats stored or in flight
  assign cbuf_re    = (wst == W_DATA) && (w_rd_left != '0) &&
                      (32'(pq_count) + 32'(w_inflight) < 4);
  assign cbuf_raddr = w_src[w_cur];

  mf_fifo #(.T(logic [BEAT_W-1:0]), .DEPTH(4)) u_pq (
    .clk   (clk),
    .rst_n (rst_n),
    .push  (w_inflight),
    .din   (cbuf_rdata),
    .pop   (pq_pop),
    .dout  (pq_dout),
    .empty (pq_empty),
    .full  (pq_full),
    .count (pq_count)
  );

  assign w_dat_valid = (wst == W_DATA) && !pq_empty;
  assign pq_pop      = w_dat_valid && w_dat_ready;
  assign host_wr_dat_valid = w_dat_valid && !use_dev;
  assign dev_wr_dat_valid  = w_dat_valid &&  use_dev;
  assign host_wr_dat.data  = pq_dout;
  assign host_wr_dat.last  = (w_tx_left == 1);
  assign dev_wr_dat        = host_wr_dat;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wst        <= W_IDLE;
      w_addr     <= '0;
      w_src      <= '0;
      w_left     <= '0;
      w_cur      <= '0;
      w_blen     <= '0;
      w_rd_left  <= '0;
      w_tx_left  <= '0;
      w_inflight <= 1'b0;
      wr_busy    <= '0;
      wr_done    <= '0;
    end else begin
      wr_done    <= '0;
      w_inflight <= cbuf_re;
      for (int c = 0; c < N_WR; c++) begin
        if (wr_start[c] && !wr_busy[c]) begin
          w_addr[c]  <= wr_addr[c];
          w_src[c]   <= wr_src[c];
          w_left[c]  <= ($clog2(C_BEATS)+1)'(C_BEATS);
          wr_busy[c] <= 1'b1;
        end
      end
      if (cbuf_re) w_src[w_cur] <= w_src[w_cur] + 1'b1;
      case (wst)
        W_IDLE: if (w_any) begin
          w_cur  <= w_pick;
          w_blen <= (32'(w_left[w_pick]) > BURST_BEATS) ? ($clog2(BURST_BEATS)+1)'(BURST_BEATS)
                                                       : ($clog2(BURST_BEATS)+1)'(w_left[w_pick]);
          wst    <= W_REQ;
        end
        W_REQ: if (w_req_ready) begin
          w_left[w_cur] <= w_left[w_cur] - ($clog2(C_BEATS)+1)'(w_blen);
          w_rd_left     <= w_blen;
          w_tx_left     <= w_blen;
          wst           <= W_DATA;
        end
        W_DATA: begin
          if (cbuf_re) w_rd_left <= w_rd_left - 1'b1;
          if (pq_pop) begin
            w_tx_left <= w_tx_left - 1'b1;
            if (w_tx_left == 1) begin
              wst <= W_IDLE;
              if (w_left[w_cur] == '0) begin
                wr_busy[w_cur] <= 1'b0;
                wr_done[w_cur] <= 1'b1;
              end
            end
          end
        end
        default: wst <= W_IDLE;
      endcase
    end
  end

  // Only the port of the active mode may return read data.
  a_one_rsp_port: assert property (@(posedge clk) disable iff (!rst_n)
    !(host_rd_rsp_valid && dev_rd_rsp_valid));
  // Responses only for channels that are waiting for data.
  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid |-> rd_busy[rtag]);
  // A request must be held until it is accepted.
  a_rd_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    host_rd_req_valid && !host_rd_req_ready |=> host_rd_req_valid && $stable(host_rd_req));

endmodule
