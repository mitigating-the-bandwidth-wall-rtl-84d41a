// mf_pe: one processing element of the output-stationary systolic array.
//
// As drawn in the PE detail of the paper's array figure, the PE registers the
// incoming A operand (passed on to the right as a_out) and the incoming B
// operand (passed on downwards as b_out), multiplies the two registered values
// and adds the product into an accumulator register that feeds back into the
// adder. A valid bit and a last bit travel with A. On a valid beat the product
// is accumulated; on a valid beat that also carries last, the finished sum
// (accumulator plus this product) is copied into a result register and the
// accumulator restarts from zero, so the next output tile can stream in without
// a gap. The result registers of one column form a shift chain (sum_in from the
// PE above, sum_out to the PE below) that the array uses to drain a finished
// tile row by row while the next tile is already being accumulated.
//
// Timing: operands are registered on the clock edge they arrive; the product
// of those registers is accumulated one edge later. Operands are signed
// integers of DATA_W bits; the accumulator wraps at ACC_W bits.
// Following the paper: registered A/B pass-through, multiplier, adder with
// accumulator feedback, sum output downwards. This design's own choices: the
// separate result register (so that draining overlaps the next tile), the
// valid/last side band, signed wrap-around arithmetic and synchronous reset.
// With FLOAT set (DATA_W 16 or 32, ACC_W 32) the same PE takes IEEE half or
// single precision operands and accumulates in single precision
// (mf_fp_mul, mf_fp_add: round to nearest even, flush-to-zero); the
// accumulator and result register then hold FP32 bit patterns, 0 being +0.0.
// The FP8 variant the paper also lists is not built: its format is not given.
module mf_pe #(
  parameter int unsigned DATA_W = 8,
  parameter int unsigned ACC_W  = 32,
  parameter bit          FLOAT  = 1'b0   // 1: IEEE FP16 / FP32 operands, FP32 sums
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [DATA_W-1:0] a_in,
  input  logic              v_in,     // a_in / b_in carry a product term
  input  logic              l_in,     // last term of the current output tile
  input  logic [DATA_W-1:0] b_in,
  output logic [DATA_W-1:0] a_out,
  output logic              v_out,
  output logic              l_out,
  output logic [DATA_W-1:0] b_out,
  input  logic              shift,    // drain: take result from the PE above
  input  logic [ACC_W-1:0]  sum_in,
  output logic [ACC_W-1:0]  sum_out
);

  logic [DATA_W-1:0] a_q, b_q;
  logic              v_q, l_q;
  logic [ACC_W-1:0]  acc_q, res_q;
  logic [ACC_W-1:0]  prod, acc_next;

  if (FLOAT) begin : g_fp
    // floating point: single-precision product, single-precision sum
    mf_fp_mul #(.DATA_W(DATA_W)) u_mul (.a(a_q), .b(b_q), .y(prod));
    mf_fp_add u_add (.a(acc_q), .b(prod), .y(acc_next));
  end else begin : g_int
    assign prod     = ACC_W'($signed(a_q) * $signed(b_q));
    assign acc_next = acc_q + prod;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_q <= '0;
      b_q <= '0;
      v_q <= 1'b0;
      l_q <= 1'b0;
    end else begin
      a_q <= a_in;
      b_q <= b_in;
      v_q <= v_in;
      l_q <= l_in & v_in;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc_q <= '0;
    end else if (v_q) begin
      acc_q <= l_q ? '0 : acc_next;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      res_q <= '0;
    end else if (v_q && l_q) begin
      res_q <= acc_next;
    end else if (shift) begin
      res_q <= sum_in;
    end
  end

  assign a_out   = a_q;
  assign b_out   = b_q;
  assign v_out   = v_q;
  assign l_out   = l_q;
  assign sum_out = res_q;

endmodule
