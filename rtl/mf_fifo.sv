// mf_fifo: small synchronous first-in first-out queue.
//
// DEPTH entries of type T. push stores din at the clock edge when the queue
// is not full; pop drops the head when it is not empty; dout always shows the
// head. count gives the number of stored entries. Pushing a full queue or
// popping an empty one is a protocol error and is checked by assertions.
// Used for the descriptor queue and for the write-data prefetch of the DMA.
module mf_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   push,
  input  T                       din,
  input  logic                   pop,
  output T                       dout,
  output logic                   empty,
  output logic                   full,
  output logic [$clog2(DEPTH):0] count
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                mem [DEPTH];
  logic [PW-1:0]   wp, rp;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push && !full) begin
        wp <= (wp == PW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      end
      if (pop && !empty) begin
        rp <= (rp == PW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      end
      count <= count + ($clog2(DEPTH)+1)'(push && !full) - ($clog2(DEPTH)+1)'(pop && !empty);
    end
  end

  always_ff @(posedge clk) begin
    if (push && !full) mem[wp] <= din;
  end

  assign dout  = mem[rp];
  assign empty = (count == '0);
  assign full  = (count == ($clog2(DEPTH)+1)'(DEPTH));

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop  |-> !empty);

endmodule
