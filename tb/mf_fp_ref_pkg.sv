// mf_fp_ref_pkg: reference floating-point arithmetic for the testbenches.
//
// Works through the simulator's double-precision reals, independently of the
// RTL's integer significand datapath. A product or sum of two single-precision
// numbers is formed in double precision and then rounded once to single
// precision, to nearest with ties to even (double has more than 2 x 24 + 2
// significand bits, so this gives the correctly rounded single result).
// Matches the accelerator's conventions: subnormal inputs read as zero,
// results below the smallest normal single flushed to zero, quiet NaN
// 0x7fc00000.
package mf_fp_ref_pkg;

  // IEEE half or single bit pattern -> real (subnormals read as zero)
  function automatic real to_real(input logic [31:0] v, input int width);
    int ew, fw, bias, e;
    logic s;
    logic [51:0] f;
    ew   = (width == 16) ? 5 : 8;
    fw   = width - 1 - ew;
    bias = (1 << (ew - 1)) - 1;
    s    = v[width-1];
    e    = int'((v >> fw) & ((1 << ew) - 1));
    f    = 52'(v & ((64'd1 << fw) - 1)) << (52 - fw);
    if (e == 0) return s ? -0.0 : 0.0;
    return $bitstoreal({s, 11'(e - bias + 1023), f});
  endfunction

  // real -> single bit pattern, round to nearest even, flush-to-zero
  function automatic logic [31:0] to_single(input real r);
    logic [63:0] d;
    logic        s, g, rest;
    int          e;
    logic [52:0] m;
    logic [24:0] q;
    d = $realtobits(r);
    s = d[63];
    if (d[62:52] == 11'h7ff) return (d[51:0] != '0) ? 32'h7fc0_0000 : {s, 8'hff, 23'd0};
    if (d[62:52] == '0) return {s, 31'd0};
    e    = int'(d[62:52]) - 1023 + 127;
    m    = {1'b1, d[51:0]};
    q    = {1'b0, m[52:29]};
    g    = m[28];
    rest = (m[27:0] != '0);
    if (g && (rest || q[0])) q = q + 1'b1;
    if (q[24]) begin
      q = q >> 1;
      e = e + 1;
    end
    if (e >= 255) return {s, 8'hff, 23'd0};
    if (e <= 0)   return {s, 31'd0};
    return {s, 8'(e), q[22:0]};
  endfunction

  function automatic logic [31:0] mul(input logic [31:0] a, input logic [31:0] b, input int width);
    return to_single(to_real(a, width) * to_real(b, width));
  endfunction

  function automatic logic [31:0] add(input logic [31:0] a, input logic [31:0] b);
    return to_single(to_real(a, 32) + to_real(b, 32));
  endfunction

  // random normal number of the given width with exponent within +-span of 1.0
  function automatic logic [31:0] rand_fp(input int width, input int span);
    int ew, fw, bias;
    logic [31:0] v;
    ew   = (width == 16) ? 5 : 8;
    fw   = width - 1 - ew;
    bias = (1 << (ew - 1)) - 1;
    v    = 32'($urandom) & ((32'd1 << fw) - 1);
    v   |= 32'(bias - span + int'($urandom_range(2 * span))) << fw;
    v   |= 32'($urandom_range(1)) << (width - 1);
    return v;
  endfunction

endpackage
