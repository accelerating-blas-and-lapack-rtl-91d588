// tb_fp_pkg: helpers shared by the floating-point testbenches.
//
// rand_fp draws a random normal binary64 value whose unbiased exponent lies in
// [-span, span], so products, quotients and sums of two such values stay far
// from overflow and from the subnormal range that the units flush to zero.
// Reference results are computed with the simulator's own double-precision
// real arithmetic, which rounds to nearest even like the units do.
package tb_fp_pkg;
  function automatic logic [63:0] rand_fp(input int span);
    logic [63:0] r;
    int          e;
    e = int'($urandom_range(2 * span)) - span + 1023;
    r = {$urandom(), $urandom()};
    r[62:52] = 11'(e);
    return r;
  endfunction

  function automatic logic [63:0] r2b(input real x);
    return $realtobits(x);
  endfunction

  function automatic real b2r(input logic [63:0] x);
    return $bitstoreal(x);
  endfunction
endpackage
