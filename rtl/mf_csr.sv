// mf_csr: memory-mapped control registers, descriptor queue, doorbell and
// completion interrupt of the accelerator.
//
// The host driver programs the accelerator through a simple register port
// (one access per cycle, reads answered combinationally):
//   0x00 MODE      RW  [1:0] memory access path: 0 DM, 1 DC, 2 DevMem
//   0x08 STATUS    RO  [0] busy, [1] interrupt pending, [15:8] queued descriptors,
//                      [31:16] released descriptors not yet taken
//   0x10 DESC_A    RW  address of the A tile of the next descriptor
//   0x18 DESC_B    RW  address of the row-striped B tile
//   0x20 DESC_C    RW  address the finished C tile is written to
//   0x28 DESC_PUSH WO  push {DESC_A, DESC_B, DESC_C, last = wdata[0]} into the queue
//   0x30 DOORBELL  WO  release wdata[15:0] more queued descriptors to the controller
//   0x38 IRQ       RW  read: [0] pending; write 1 to [0]: acknowledge
//   0x40 SA_CYC    RO  cycles in which the array was fed from the tile buffers
//   0x48 STALL_CYC RO  cycles in which work was pending but the array had no tile
// A descriptor is one A-tile x B-tile step; last marks the final step of a
// result tile. Only released descriptors are handed to the controller, so the
// driver can queue a batch and start it with one doorbell write. When every
// released descriptor has been taken and the controller is idle, the block
// raises the interrupt: irq_pending is set and msi pulses for one cycle (the
// PCIe interface turns it into a message-signalled interrupt).
//
// Descriptors for read(A), read(B), write(C), an MMIO doorbell and an MSI on
// completion follow the paper's description of the driver. The register map,
// the queue depth and the batch semantics of the doorbell are this design's.
module mf_csr
  import mf_pkg::*;
#(
  parameter int unsigned QDEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  // register port
  input  logic             mmio_valid,
  input  logic             mmio_we,
  input  logic [7:0]       mmio_addr,
  input  logic [63:0]      mmio_wdata,
  output logic [63:0]      mmio_rdata,
  // to the controller
  output acc_mode_e        mode,
  output logic             desc_valid,
  output tile_desc_t       desc,
  input  logic             desc_pop,
  input  logic             ctrl_idle,
  input  logic [31:0]      sa_cycles,
  input  logic [31:0]      stall_cycles,
  // interrupt
  output logic             msi,
  output logic             irq_pending
);

  localparam logic [7:0] R_MODE = 8'h00, R_STATUS = 8'h08, R_DESC_A = 8'h10,
                         R_DESC_B = 8'h18, R_DESC_C = 8'h20, R_PUSH = 8'h28,
                         R_DOORBELL = 8'h30, R_IRQ = 8'h38, R_SA_CYC = 8'h40,
                         R_STALL = 8'h48;

  logic [ADDR_W-1:0]       a_q, b_q, c_q;
  logic [15:0]             released;
  logic                    armed;
  logic                    wr, push, q_empty, q_full;
  logic [$clog2(QDEPTH):0] q_count;
  tile_desc_t              q_in;

  assign wr   = mmio_valid && mmio_we;
  assign push = wr && (mmio_addr == R_PUSH) && !q_full;
  assign q_in = '{a_addr: a_q, b_addr: b_q, c_addr: c_q, last: mmio_wdata[0]};

  mf_fifo #(.T(tile_desc_t), .DEPTH(QDEPTH)) u_q (
    .clk   (clk),
    .rst_n (rst_n),
    .push  (push),
    .din   (q_in),
    .pop   (desc_pop),
    .dout  (desc),
    .empty (q_empty),
    .full  (q_full),
    .count (q_count)
  );

  assign desc_valid = !q_empty && (released != '0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mode        <= MODE_DM;
      a_q         <= '0;
      b_q         <= '0;
      c_q         <= '0;
      released    <= '0;
      armed       <= 1'b0;
      irq_pending <= 1'b0;
      msi         <= 1'b0;
    end else begin
      msi <= 1'b0;
      if (wr) begin
        case (mmio_addr)
          R_MODE:   if (ctrl_idle) mode <= acc_mode_e'(mmio_wdata[1:0]);
          R_DESC_A: a_q <= mmio_wdata;
          R_DESC_B: b_q <= mmio_wdata;
          R_DESC_C: c_q <= mmio_wdata;
          R_IRQ:    if (mmio_wdata[0]) irq_pending <= 1'b0;
          default: ;
        endcase
      end
      if (wr && mmio_addr == R_DOORBELL) begin
        released <= released + mmio_wdata[15:0] - 16'(desc_pop);
        armed    <= 1'b1;
      end else if (desc_pop) begin
        released <= released - 1'b1;
      end
      if (armed && released == '0 && ctrl_idle && !(wr && mmio_addr == R_DOORBELL)) begin
        armed       <= 1'b0;
        irq_pending <= 1'b1;
        msi         <= 1'b1;
      end
    end
  end

  always_comb begin
    mmio_rdata = '0;
    case (mmio_addr)
      R_MODE:   mmio_rdata = 64'(mode);
      R_STATUS: mmio_rdata = {32'b0, released, 8'(q_count), 6'b0, irq_pending, !ctrl_idle};
      R_DESC_A: mmio_rdata = a_q;
      R_DESC_B: mmio_rdata = b_q;
      R_DESC_C: mmio_rdata = c_q;
      R_IRQ:    mmio_rdata = 64'(irq_pending);
      R_SA_CYC: mmio_rdata = 64'(sa_cycles);
      R_STALL:  mmio_rdata = 64'(stall_cycles);
      default:  mmio_rdata = '0;
    endcase
  end

  a_pop_released: assert property (@(posedge clk) disable iff (!rst_n)
    desc_pop |-> desc_valid);

endmodule
