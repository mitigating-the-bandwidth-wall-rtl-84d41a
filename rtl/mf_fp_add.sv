// mf_fp_add: IEEE 754 single-precision adder used as the floating-point
// accumulator of a processing element.
//
// Combinational: y = a + b, rounded to nearest, ties to even. The smaller
// operand is aligned against the larger one inside a 50-bit window (24-bit
// significand plus 26 guard positions); any bits shifted out of the window
// are kept as a sticky 1 in the lowest position, which is far enough below
// the rounding point for the result to be correctly rounded. The sum or
// difference is normalised with a leading-one search and rounded to 24 bits;
// a carry out of the rounding increments the exponent.
// Special values: subnormal inputs are read as zero and results below the
// smallest normal number are flushed to zero (flush-to-zero, as is common in
// accelerator datapaths); overflow gives infinity; NaN, or infinities of
// opposite sign, give the quiet NaN 0x7fc00000. An exact cancellation gives
// +0.
// The paper lists FP16/FP32 processing elements but not their arithmetic;
// IEEE binary32 accumulation with flush-to-zero is this design's choice.
module mf_fp_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  localparam int unsigned WIN = 50;   // significand window

  always_comb begin
    logic              sa, sb, sx, sy, a_inf, b_inf, a_nan, b_nan, sticky, g, rest, rnd;
    logic [7:0]        ea, eb, ex, ey;
    logic [23:0]       ma, mb, mx, my;
    logic [WIN-1:0]    xw, yw;
    logic [WIN:0]      sum;
    logic [24:0]       mr;
    int                d, lead, e;

    e = 0; mr = '0; g = 1'b0; rest = 1'b0; rnd = 1'b0;

    sa = a[31]; ea = a[30:23]; ma = (ea == 8'd0) ? 24'd0 : {1'b1, a[22:0]};
    sb = b[31]; eb = b[30:23]; mb = (eb == 8'd0) ? 24'd0 : {1'b1, b[22:0]};
    a_inf = (ea == 8'hff) && (a[22:0] == '0);
    b_inf = (eb == 8'hff) && (b[22:0] == '0);
    a_nan = (ea == 8'hff) && (a[22:0] != '0);
    b_nan = (eb == 8'hff) && (b[22:0] != '0);

    // larger magnitude first
    if ({ea, ma} >= {eb, mb}) begin
      sx = sa; ex = ea; mx = ma; sy = sb; ey = eb; my = mb;
    end else begin
      sx = sb; ex = eb; mx = mb; sy = sa; ey = ea; my = ma;
    end

    d      = int'(ex) - int'(ey);
    xw     = {mx, 26'd0};
    sticky = 1'b0;
    if (my == '0) begin
      yw = '0;
    end else if (d >= WIN) begin
      yw     = '0;
      sticky = 1'b1;
    end else begin
      yw     = {my, 26'd0} >> d;
      sticky = (({my, 26'd0} & ((WIN'(1) << d) - 1'b1)) != '0);
    end
    yw[0] = yw[0] | sticky;

    sum = (sx == sy) ? {1'b0, xw} + {1'b0, yw} : {1'b0, xw} - {1'b0, yw};

    // leading one of the 51-bit result
    lead = -1;
    for (int i = 0; i <= WIN; i++) if (sum[i]) lead = i;

    y = '0;
    if (a_nan || b_nan || (a_inf && b_inf && sa != sb)) begin
      y = 32'h7fc0_0000;
    end else if (a_inf || b_inf) begin
      y = a_inf ? {sa, 8'hff, 23'd0} : {sb, 8'hff, 23'd0};
    end else if (lead < 0) begin
      y = (mx == '0) ? {sx & sy, 31'd0} : 32'd0;   // exact zero
    end else begin
      // significand in bits [lead : lead-23], guard bit below, rest sticky.
      // x is normal and sits at bit 49, so even full cancellation leaves
      // lead >= 25; the second branch only covers the general case.
      e    = int'(ex) + (lead - (WIN - 1));
      if (lead >= 24) begin
        mr   = {1'b0, sum[lead -: 24]};
        g    = sum[lead - 24];
        rest = ((sum & (((WIN+1)'(1) << (lead - 24)) - 1'b1)) != '0);
      end else begin
        mr   = {1'b0, 24'(sum << (23 - lead))};
        g    = 1'b0;
        rest = 1'b0;
      end
      rnd = g && (rest || mr[0]);
      mr  = mr + 25'(rnd);
      if (mr[24]) begin
        mr = mr >> 1;
        e  = e + 1;
      end
      if (e >= 255)    y = {sx, 8'hff, 23'd0};
      else if (e <= 0) y = {sx, 31'd0};
      else             y = {sx, 8'(e), mr[22:0]};
    end
  end

endmodule
