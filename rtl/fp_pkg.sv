// fp_pkg: shared IEEE-754 binary64 helpers for the PE's arithmetic pipelines.
//
// Every unit in this design works on double-precision words (64 bits: sign,
// 11-bit biased exponent, 52-bit fraction). The helpers below unpack operands,
// classify them and round a normalised significand to the nearest even value.
// Design choices of this implementation (the source describes only "double
// precision floating point arithmetic"): subnormal operands are read as zero,
// results that would be subnormal are flushed to a signed zero, overflow gives
// a signed infinity and every NaN result is the quiet NaN 0x7FF8_0000_0000_0000.
package fp_pkg;

  typedef logic [63:0] fp64_t;

  localparam fp64_t QNAN = 64'h7FF8_0000_0000_0000;

  typedef struct packed {
    logic        sign;
    logic [10:0] exp;
    logic [52:0] mant;   // significand with the hidden bit
    logic        zero;   // zero or subnormal (flushed)
    logic        inf;
    logic        nan;
  } fp_unpacked_t;

  function automatic fp_unpacked_t fp_unpack(input fp64_t x);
    fp_unpacked_t u;
    u.sign = x[63];
    u.exp  = x[62:52];
    u.mant = {1'b1, x[51:0]};
    u.zero = (x[62:52] == 11'd0);
    u.inf  = (x[62:52] == 11'h7FF) && (x[51:0] == 52'd0);
    u.nan  = (x[62:52] == 11'h7FF) && (x[51:0] != 52'd0);
    return u;
  endfunction

  function automatic fp64_t fp_inf(input logic sign);
    return {sign, 11'h7FF, 52'd0};
  endfunction

  function automatic fp64_t fp_zero(input logic sign);
    return {sign, 63'd0};
  endfunction

  // Round and pack. m[55] is the leading one, m[55:3] the 53-bit significand,
  // m[2] the round bit and m[1:0] carry the sticky information. exp is the
  // biased exponent of m[55], as a signed number wide enough for any
  // intermediate value.
  function automatic fp64_t fp_round_pack(input logic sign,
                                          input logic signed [13:0] exp,
                                          input logic [55:0] m);
    logic [53:0]        sig;
    logic               rnd, stk, inc;
    logic signed [13:0] e;
    sig = {1'b0, m[55:3]};
    rnd = m[2];
    stk = |m[1:0];
    inc = rnd & (stk | m[3]);
    sig = sig + {53'd0, inc};
    e   = exp;
    if (sig[53]) begin
      sig = sig >> 1;
      e   = e + 14'sd1;
    end
    if (e >= 14'sd2047)    return fp_inf(sign);
    else if (e <= 14'sd0)  return fp_zero(sign);
    else                   return {sign, e[10:0], sig[51:0]};
  endfunction

endpackage
