// mf_top: the MatrixFlow matrix-multiplication accelerator.
//
// A loosely coupled accelerator that multiplies large matrices by streaming
// page-sized tiles from memory instead of holding them on chip. The driver
// cuts A into W x L tiles (row-major) and B into W x L tiles stored row-striped
// (the rows of B's transposed block), each tile exactly one 4 KB page, and
// queues one descriptor per A-tile x B-tile step of the blocked GEMM
//   C[i][j] = sum over k-blocks of A_tile(i,k) x B_tile(j,k)^T.
// The DMA fetches each tile with one page-sized transfer (four 1024-byte
// bursts) into one half of the double-buffered input buffers (A0/A1, B0/B1,
// 4 KB each) while the W x W output-stationary systolic array consumes the
// other half, one k per cycle; finished W x W result tiles are drained into
// the 4 KB output buffer C and written back by the DMA while the array
// already accumulates the next tile.
//
// Interfaces: a register port (mmio_*) for the driver, a completion interrupt
// (msi pulse, irq_pending level), and two memory ports of the same form: the
// host port, which stands for the PCIe interface (the PCIe link, root complex,
// SMMU address translation and host caches lie outside this design), and the
// device-memory port for on-card memory. Each port has a read request channel
// (valid/ready), a read data channel of 64-byte beats (no back-pressure), a
// write request channel and a write data channel (valid/ready).
//
// Sizes default to the paper's design point: a 16 x 16 INT8 array, 4 KB
// pages, INT8 tiles of 16 x 256. The accumulators are 32 bits, so one row of
// results (16 x 32 bit) is exactly one 64-byte beat; the output buffer holds
// four 1 KB result tiles. W * ACC_W must equal the 512-bit beat.
// FLOAT = 1 builds floating-point PEs instead (FP16 with DATA_W = 16, FP32
// with DATA_W = 32, both summed in FP32); everything around the array is the
// same, since only element width and tile length L depend on the precision.
module mf_top
  import mf_pkg::*;
#(
  parameter int unsigned W      = 16,
  parameter int unsigned DATA_W = 8,
  parameter int unsigned ACC_W  = 32,
  parameter int unsigned QDEPTH = 16,
  parameter bit          FLOAT  = 1'b0    // 1: FP16 (DATA_W 16) or FP32 (DATA_W 32)
) (
  input  logic        clk,
  input  logic        rst_n,
  // driver register port
  input  logic        mmio_valid,
  input  logic        mmio_we,
  input  logic [7:0]  mmio_addr,
  input  logic [63:0] mmio_wdata,
  output logic [63:0] mmio_rdata,
  output logic        msi,
  output logic        irq_pending,
  // host memory port (PCIe)
  output logic        host_rd_req_valid,
  input  logic        host_rd_req_ready,
  output mem_req_t    host_rd_req,
  input  logic        host_rd_rsp_valid,
  input  mem_rsp_t    host_rd_rsp,
  output logic        host_wr_req_valid,
  input  logic        host_wr_req_ready,
  output mem_req_t    host_wr_req,
  output logic        host_wr_dat_valid,
  input  logic        host_wr_dat_ready,
  output mem_wdat_t   host_wr_dat,
  // device-side memory port
  output logic        dev_rd_req_valid,
  input  logic        dev_rd_req_ready,
  output mem_req_t    dev_rd_req,
  input  logic        dev_rd_rsp_valid,
  input  mem_rsp_t    dev_rd_rsp,
  output logic        dev_wr_req_valid,
  input  logic        dev_wr_req_ready,
  output mem_req_t    dev_wr_req,
  output logic        dev_wr_dat_valid,
  input  logic        dev_wr_dat_ready,
  output mem_wdat_t   dev_wr_dat
);

  localparam int unsigned L          = PAGE_BYTES * 8 / (W * DATA_W);
  localparam int unsigned PAGE_BEATS = PAGE_BYTES / BEAT_BYTES;
  localparam int unsigned C_DEPTH    = PAGE_BYTES / BEAT_BYTES;
  localparam int unsigned TILE_BEATS = W * W * ACC_W / BEAT_W;
  localparam int unsigned C_SLOTS    = C_DEPTH / TILE_BEATS;

  // ------------------------------------------------------------ control
  acc_mode_e  mode;
  logic       desc_valid, desc_pop, ctrl_idle;
  tile_desc_t desc;
  logic [31:0] sa_cycles, stall_cycles;

  mf_csr #(.QDEPTH(QDEPTH)) u_csr (
    .clk, .rst_n,
    .mmio_valid, .mmio_we, .mmio_addr, .mmio_wdata, .mmio_rdata,
    .mode, .desc_valid, .desc, .desc_pop, .ctrl_idle,
    .sa_cycles, .stall_cycles,
    .msi, .irq_pending
  );

  logic [1:0]                      rd_start, rd_done;
  logic [1:0][ADDR_W-1:0]          rd_addr;
  logic [1:0]                      wr_start, wr_done;
  logic [1:0][ADDR_W-1:0]          wr_addr;
  logic [1:0][$clog2(C_DEPTH)-1:0] wr_src;
  logic                            fill_sel, rd_en, rd_sel;
  logic [$clog2(L)-1:0]            rd_k;
  logic                            sa_valid, sa_last, sa_busy, sa_out_valid;
  logic [$clog2(W)-1:0]            sa_out_row;
  logic [W-1:0][ACC_W-1:0]         sa_out_data;
  logic                            cbuf_we, cbuf_re;
  logic [$clog2(C_DEPTH)-1:0]      cbuf_waddr, cbuf_raddr;
  logic [BEAT_W-1:0]               cbuf_rdata;

  mf_controller #(.L(L), .W(W), .C_SLOTS(C_SLOTS), .C_DEPTH(C_DEPTH)) u_ctrl (
    .clk, .rst_n,
    .desc_valid, .desc, .desc_pop, .idle(ctrl_idle), .sa_cycles, .stall_cycles,
    .rd_start, .rd_addr, .rd_done, .fill_sel,
    .wr_start, .wr_addr, .wr_src, .wr_done,
    .rd_en, .rd_k, .rd_sel,
    .sa_valid, .sa_last, .sa_busy, .sa_out_valid, .sa_out_row,
    .cbuf_we, .cbuf_waddr
  );

  // ---------------------------------------------------------------- DMA
  logic [1:0]                        buf_we;
  logic [$clog2(PAGE_BEATS)-1:0]     buf_waddr;
  logic [BEAT_W-1:0]                 buf_wdata;

  mf_dma #(.N_RD(2), .N_WR(2), .C_DEPTH(C_DEPTH), .C_BEATS(TILE_BEATS)) u_dma (
    .clk, .rst_n, .mode,
    .rd_start, .rd_addr, .rd_busy(), .rd_done,
    .buf_we, .buf_waddr, .buf_wdata,
    .wr_start, .wr_addr, .wr_src, .wr_busy(), .wr_done,
    .cbuf_re, .cbuf_raddr, .cbuf_rdata,
    .host_rd_req_valid, .host_rd_req_ready, .host_rd_req,
    .host_rd_rsp_valid, .host_rd_rsp,
    .host_wr_req_valid, .host_wr_req_ready, .host_wr_req,
    .host_wr_dat_valid, .host_wr_dat_ready, .host_wr_dat,
    .dev_rd_req_valid, .dev_rd_req_ready, .dev_rd_req,
    .dev_rd_rsp_valid, .dev_rd_rsp,
    .dev_wr_req_valid, .dev_wr_req_ready, .dev_wr_req,
    .dev_wr_dat_valid, .dev_wr_dat_ready, .dev_wr_dat
  );

  // ------------------------------------------------ double-buffered inputs
  // half h of A is written by read channel 0 when fill_sel == h and read by
  // the array when rd_sel == h; likewise B with read channel 1.
  logic [1:0][W-1:0][DATA_W-1:0] a_col, b_col;
  logic                          rd_sel_q;

  for (genvar h = 0; h < 2; h++) begin : g_half
    mf_in_buffer #(.W(W), .DATA_W(DATA_W), .PAGE_BYTES(PAGE_BYTES), .BEAT_W(BEAT_W)) u_a (
      .clk,
      .wr_en  (buf_we[0] && (fill_sel == 1'(h))),
      .waddr  (buf_waddr),
      .wdata  (buf_wdata),
      .rd_en  (rd_en && (rd_sel == 1'(h))),
      .rd_k   (rd_k),
      .rd_col (a_col[h])
    );
    mf_in_buffer #(.W(W), .DATA_W(DATA_W), .PAGE_BYTES(PAGE_BYTES), .BEAT_W(BEAT_W)) u_b (
      .clk,
      .wr_en  (buf_we[1] && (fill_sel == 1'(h))),
      .waddr  (buf_waddr),
      .wdata  (buf_wdata),
      .rd_en  (rd_en && (rd_sel == 1'(h))),
      .rd_k   (rd_k),
      .rd_col (b_col[h])
    );
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_sel_q <= rd_sel;
  end

  // ------------------------------------------------------ systolic array
  mf_systolic_array #(.W(W), .DATA_W(DATA_W), .ACC_W(ACC_W), .FLOAT(FLOAT)) u_sa (
    .clk, .rst_n,
    .in_valid  (sa_valid),
    .in_last   (sa_last),
    .a_col     (a_col[rd_sel_q]),
    .b_col     (b_col[rd_sel_q]),
    .out_valid (sa_out_valid),
    .out_row   (sa_out_row),
    .out_data  (sa_out_data),
    .busy      (sa_busy)
  );

  // ---------------------------------------------------- output buffer C
  mf_tile_sram #(.DEPTH(C_DEPTH), .WIDTH(BEAT_W)) u_cbuf (
    .clk,
    .we    (cbuf_we),
    .waddr (cbuf_waddr),
    .wdata (sa_out_data),
    .re    (cbuf_re),
    .raddr (cbuf_raddr),
    .rdata (cbuf_rdata)
  );

  if (FLOAT && !(DATA_W inside {16, 32} && ACC_W == 32)) begin : g_bad_float
    $error("mf_top: floating point needs DATA_W 16 or 32 and ACC_W 32");
  end

  if (W * ACC_W != BEAT_W) begin : g_bad_width
    $error("mf_top: one result row (W * ACC_W bits) must be one memory beat");
  end

endmodule
