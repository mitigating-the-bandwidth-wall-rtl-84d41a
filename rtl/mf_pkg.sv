// mf_pkg: shared constants and types of the MatrixFlow accelerator.
//
// The accelerator streams page-sized (4 KB) tiles of A and B from memory into a
// W x W output-stationary systolic array and writes W x W result tiles back.
// This package holds the numbers every block agrees on: the page size, the
// 64-byte data beat of the memory port (64 B per cycle at 1 GHz is the 64 GiB/s
// printed next to the buffers in the block diagram), the 1024-byte DMA burst,
// the access-mode encoding and the descriptor and memory-port structs.
// Page size, W = 16, INT8 data, 1024-byte bursts and 2 read / 2 write DMA
// channels follow the paper; the struct layouts, field widths and encodings are
// choices of this design.
package mf_pkg;

  localparam int unsigned PAGE_BYTES  = 4096;   // one OS page = one tile
  localparam int unsigned BEAT_BYTES  = 64;     // memory-port data beat
  localparam int unsigned BEAT_W      = BEAT_BYTES * 8;
  localparam int unsigned BURST_BYTES = 1024;   // DMA burst length
  localparam int unsigned ADDR_W      = 64;     // host virtual address
  localparam int unsigned LEN_W       = 11;     // burst length in bytes, up to 1024
  localparam int unsigned TAG_W       = 2;      // DMA channel id carried by a request

  // Memory access path selected by the driver.
  //   DM     : direct memory, non-coherent host request (bypasses the LLC)
  //   DC     : direct cache, coherent host request (enters the LLC)
  //   DEVMEM : device-side memory port, no PCIe crossing
  typedef enum logic [1:0] {
    MODE_DM     = 2'd0,
    MODE_DC     = 2'd1,
    MODE_DEVMEM = 2'd2
  } acc_mode_e;

  // One unit of work for the controller: multiply the A tile at a_addr by the
  // row-striped B tile at b_addr and accumulate; if last is set the W x W
  // result is complete and is written to c_addr.
  typedef struct packed {
    logic [ADDR_W-1:0] a_addr;
    logic [ADDR_W-1:0] b_addr;
    logic [ADDR_W-1:0] c_addr;
    logic              last;
  } tile_desc_t;

  // Read or write burst request on a memory port.
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic [LEN_W-1:0]  len;       // bytes, a multiple of BEAT_BYTES
    logic [TAG_W-1:0]  tag;       // issuing channel
    logic              coherent;  // 1: snooped (DC), 0: no-snoop (DM, DevMem)
  } mem_req_t;

  // Read data beat returned by a memory port.
  typedef struct packed {
    logic [BEAT_W-1:0] data;
    logic [TAG_W-1:0]  tag;
    logic              last;      // last beat of the burst
  } mem_rsp_t;

  // Write data beat sent to a memory port.
  typedef struct packed {
    logic [BEAT_W-1:0] data;
    logic              last;
  } mem_wdat_t;

endpackage
