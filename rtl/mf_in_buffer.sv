// mf_in_buffer: one page-sized input tile buffer (A or B).
//
// A tile is W rows of L elements, stored row after row in one 4 KB page (A in
// row-major order, B row-striped, i.e. B is stored by the rows of its
// transposed block). The DMA writes the page as it arrives, one 64-byte beat
// per cycle, at beat index waddr (byte offset / 64). The array reads one
// element of every row per cycle: element k of rows 0..W-1, which is the k-th
// column of the tile.
//
// To give W elements of different rows in one cycle the buffer is split into
// W banks, one per tile row; bank i holds the PAGE_BYTES/W bytes of row i.
// A beat therefore always lands in a single bank (bank = waddr / beats per
// row). A read addresses the same word in all banks and then selects element
// k within the word. rd_col is valid one cycle after rd_en.
//
// The page size and the A/B tile shapes (INT8 16 x 256, INT16 16 x 128,
// INT32 16 x 64) are the paper's; the banked organisation and port timing are
// this design's choices.
module mf_in_buffer #(
  parameter int unsigned W          = 16,
  parameter int unsigned DATA_W     = 8,
  parameter int unsigned PAGE_BYTES = 4096,
  parameter int unsigned BEAT_W     = 512,
  // derived
  parameter int unsigned BEATS      = PAGE_BYTES * 8 / BEAT_W,
  parameter int unsigned L          = PAGE_BYTES * 8 / (W * DATA_W)
) (
  input  logic                         clk,
  input  logic                         wr_en,
  input  logic [$clog2(BEATS)-1:0]     waddr,
  input  logic [BEAT_W-1:0]            wdata,
  input  logic                         rd_en,
  input  logic [$clog2(L)-1:0]         rd_k,
  output logic [W-1:0][DATA_W-1:0]     rd_col
);

  localparam int unsigned WPR = BEATS / W;          // beats per tile row
  localparam int unsigned EPW = BEAT_W / DATA_W;    // elements per beat
  localparam int unsigned WB  = (WPR > 1) ? $clog2(WPR) : 1;
  localparam int unsigned EB  = $clog2(EPW);

  logic [$clog2(W)-1:0] wbank;
  logic [WB-1:0]        wword, rword;
  logic [EB-1:0]        rsel_q;

  assign wbank = $clog2(W)'(waddr / WPR);
  assign wword = WB'(waddr % WPR);
  assign rword = WB'(rd_k / EPW);

  always_ff @(posedge clk) begin
    if (rd_en) rsel_q <= EB'(rd_k % EPW);
  end

  for (genvar i = 0; i < W; i++) begin : g_bank
    logic [BEAT_W-1:0] q;
    mf_tile_sram #(.DEPTH(WPR), .WIDTH(BEAT_W)) u_bank (
      .clk   (clk),
      .we    (wr_en && (wbank == i)),
      .waddr (wword[$clog2(WPR)-1:0]),
      .wdata (wdata),
      .re    (rd_en),
      .raddr (rword[$clog2(WPR)-1:0]),
      .rdata (q)
    );
    assign rd_col[i] = q[rsel_q*DATA_W +: DATA_W];
  end

endmodule
