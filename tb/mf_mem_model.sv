// mf_mem_model: behavioural memory behind one accelerator memory port
// (simulation only).
//
// Stands for whatever answers the accelerator's requests: host DRAM behind the
// PCIe link, LLC and SMMU, or on-card device memory. Memory is sparse, held as
// 64-byte words indexed by address / 64 (virtual = physical here; address
// translation is not modelled). Read requests are queued and answered in order,
// one 64-byte beat per cycle, LATENCY cycles after acceptance. Write requests
// are followed by their data beats. Requests are accepted on every cycle
// unless STALL_EVERY > 0, in which case the request and write-data ready
// signals drop every STALL_EVERY-th cycle to exercise back-pressure, and
// wr_block holds off all writes. Counters
// record how many read and write bursts arrived and how many carried the
// coherent attribute.
module mf_mem_model
  import mf_pkg::*;
#(
  parameter int unsigned LATENCY     = 20,
  parameter int unsigned STALL_EVERY = 0
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      wr_block,      // test control: refuse all writes while high
  input  logic      rd_req_valid,
  output logic      rd_req_ready,
  input  mem_req_t  rd_req,
  output logic      rd_rsp_valid,
  output mem_rsp_t  rd_rsp,
  input  logic      wr_req_valid,
  output logic      wr_req_ready,
  input  mem_req_t  wr_req,
  input  logic      wr_dat_valid,
  output logic      wr_dat_ready,
  input  mem_wdat_t wr_dat
);

  logic [BEAT_W-1:0] mem [longint];

  int unsigned rd_bursts, wr_bursts, coherent_reqs, len_errors, max_len;

  typedef struct {
    longint      addr;
    int unsigned beats;
    logic [TAG_W-1:0] tag;
    longint      ready_at;
  } rd_job_t;
  rd_job_t     rdq[$];
  mem_req_t    wrq[$];
  longint      cyc;
  int unsigned rd_beat, wr_beat;
  bit          stall;

  function automatic logic [BEAT_W-1:0] peek(longint byte_addr);
    if (mem.exists(byte_addr >> 6)) return mem[byte_addr >> 6];
    return '0;
  endfunction

  function automatic void poke(longint byte_addr, logic [BEAT_W-1:0] d);
    mem[byte_addr >> 6] = d;
  endfunction

  assign stall        = (STALL_EVERY != 0) && (cyc % STALL_EVERY == 0);
  assign rd_req_ready = !stall;
  assign wr_req_ready = !stall && !wr_block;
  assign wr_dat_ready = !stall && !wr_block && (wrq.size() != 0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cyc           <= 0;
      rd_bursts     <= 0;
      wr_bursts     <= 0;
      coherent_reqs <= 0;
      len_errors    <= 0;
      max_len       <= 0;
      rd_beat       <= 0;
      wr_beat       <= 0;
      rd_rsp_valid  <= 1'b0;
      rdq.delete();
      wrq.delete();
    end else begin
      cyc <= cyc + 1;
      if (rd_req_valid && rd_req_ready) begin
        rd_job_t j;
        j.addr     = longint'(rd_req.addr);
        j.beats    = int'(rd_req.len) / BEAT_BYTES;
        j.tag      = rd_req.tag;
        j.ready_at = cyc + LATENCY;
        rdq.push_back(j);
        rd_bursts     <= rd_bursts + 1;
        coherent_reqs <= coherent_reqs + 32'(rd_req.coherent);
        if (rd_req.len == 0 || rd_req.len % BEAT_BYTES != 0) len_errors <= len_errors + 1;
        if (int'(rd_req.len) > max_len) max_len <= rd_req.len;
      end
      if (wr_req_valid && wr_req_ready) begin
        wrq.push_back(wr_req);
        wr_bursts     <= wr_bursts + 1;
        coherent_reqs <= coherent_reqs + 32'(wr_req.coherent);
        if (wr_req.len == 0 || wr_req.len % BEAT_BYTES != 0) len_errors <= len_errors + 1;
        if (int'(wr_req.len) > max_len) max_len <= wr_req.len;
      end
      // read data
      rd_rsp_valid <= 1'b0;
      if (rdq.size() != 0 && rdq[0].ready_at <= cyc) begin
        rd_rsp_valid   <= 1'b1;
        rd_rsp.data    <= peek(rdq[0].addr + 64 * rd_beat);
        rd_rsp.tag     <= rdq[0].tag;
        rd_rsp.last    <= (rd_beat + 1 == rdq[0].beats);
        if (rd_beat + 1 == rdq[0].beats) begin
          rd_beat <= 0;
          void'(rdq.pop_front());
        end else begin
          rd_beat <= rd_beat + 1;
        end
      end
      // write data
      if (wr_dat_valid && wr_dat_ready) begin
        poke(longint'(wrq[0].addr) + 64 * wr_beat, wr_dat.data);
        if (wr_beat + 1 == int'(wrq[0].len) / BEAT_BYTES) begin
          if (!wr_dat.last) len_errors <= len_errors + 1;
          wr_beat <= 0;
          void'(wrq.pop_front());
        end else begin
          wr_beat <= wr_beat + 1;
        end
      end
    end
  end

endmodule
