// mf_tile_sram: simple dual-port SRAM, one write port and one read port.
//
// The output tile buffer C of the accelerator is one instance with the default
// size, 64 words of 64 bytes = one 4 KB page: the array drain writes one row of
// W accumulators (W x 32 bit = 64 bytes for W = 16) per cycle and the DMA
// reads one 64-byte beat per cycle for write-back. The same module, smaller,
// makes up the banks of the input tile buffers.
// Writes take effect at the clock edge; a read returns the word at raddr one
// cycle after re (registered output, as a synchronous SRAM macro would). A read
// and a write of the same address in one cycle return the old word.
// The 4 KB size is the paper's; the port widths and the registered read are
// this design's choices. Written as an array so that synthesis maps it to a
// memory.
module mf_tile_sram #(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned WIDTH = 512
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
