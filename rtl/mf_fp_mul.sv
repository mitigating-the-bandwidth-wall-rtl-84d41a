// mf_fp_mul: IEEE 754 multiplier of a processing element, binary16 or
// binary32 operands, binary32 product.
//
// Combinational: y = a * b for DATA_W = 16 (half precision: 5-bit exponent,
// 10-bit fraction) or DATA_W = 32 (single precision). The significands
// (hidden bit included) are multiplied exactly, the product is normalised and
// rounded to a 24-bit single-precision significand, to nearest with ties to
// even. For half-precision operands the 22-bit product always fits, so the
// product is exact. The exponent is rebiased to single precision.
// Special values as in the adder: subnormal operands count as zero, results
// below the smallest normal single are flushed to zero, overflow gives
// infinity, NaN or infinity x zero gives the quiet NaN 0x7fc00000.
// The paper's FP16/FP32 processing elements are not described beyond their
// names; producing a single-precision product for both is this design's
// choice, so that one FP32 accumulator serves both.
module mf_fp_mul #(
  parameter int unsigned DATA_W = 32
) (
  input  logic [DATA_W-1:0] a,
  input  logic [DATA_W-1:0] b,
  output logic [31:0]       y
);
  localparam int unsigned EW   = (DATA_W == 16) ? 5 : 8;    // exponent bits
  localparam int unsigned FW   = DATA_W - 1 - EW;           // fraction bits
  localparam int unsigned MW   = FW + 1;                    // significand bits
  localparam int          BIAS = (1 << (EW - 1)) - 1;

  always_comb begin
    logic              s, a_zero, b_zero, a_inf, b_inf, a_nan, b_nan, g, rest, rnd;
    logic [EW-1:0]     ea, eb;
    logic [MW-1:0]     ma, mb;
    logic [2*MW-1:0]   p;
    logic [47:0]       pw;                 // p, left-aligned in 48 bits
    logic [24:0]       mr;
    int                lead, e;

    ea = a[DATA_W-2 -: EW];
    eb = b[DATA_W-2 -: EW];
    ma = {1'b1, a[FW-1:0]};
    mb = {1'b1, b[FW-1:0]};
    s  = a[DATA_W-1] ^ b[DATA_W-1];
    a_zero = (ea == '0);
    b_zero = (eb == '0);
    a_inf  = (ea == '1) && (a[FW-1:0] == '0);
    b_inf  = (eb == '1) && (b[FW-1:0] == '0);
    a_nan  = (ea == '1) && (a[FW-1:0] != '0);
    b_nan  = (eb == '1) && (b[FW-1:0] != '0);

    p    = ma * mb;                      // in [2^(2MW-2), 2^(2MW))
    pw   = 48'(p) << (48 - 2 * MW);
    lead = pw[47] ? 47 : 46;
    e    = int'(ea) + int'(eb) - 2 * BIAS + 127 + (lead - 46);

    mr   = {1'b0, pw[lead -: 24]};
    g    = pw[lead - 24];
    rest = ((pw & ((48'(1) << (lead - 24)) - 1'b1)) != '0);
    rnd = g && (rest || mr[0]);
    mr  = mr + 25'(rnd);
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 1;
    end

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) y = 32'h7fc0_0000;
    else if (a_inf || b_inf)                                      y = {s, 8'hff, 23'd0};
    else if (a_zero || b_zero)                                    y = {s, 31'd0};
    else if (e >= 255)                                            y = {s, 8'hff, 23'd0};
    else if (e <= 0)                                              y = {s, 31'd0};
    else                                                          y = {s, 8'(e), mr[22:0]};
  end

endmodule
