// fsqrt: pipelined IEEE-754 binary64 square root (the PE's FSQRT pipe).
//
// With unbiased exponent E, the significand is doubled when E is odd so the
// exponent becomes even and halves exactly. The radicand (significand shifted
// left by 58) has a 56-bit integer square root in [2^55, 2^56), found by the
// digit-by-digit method, one root bit per step, 56 steps unrolled; a non-zero
// final remainder sets the sticky bit and the package rounds to nearest even.
// The result then travels through STAGES registers (accepted in cycle t, out
// in cycle t+STAGES, one square root per cycle). The algorithm, the register
// chain and the default depth of 4 are this implementation's choices. The
// operand b is not used (the unit has the same interface as the others only
// through its tag). Special values: sqrt(-0) = -0, sqrt(+inf) = +inf, a
// negative operand or NaN gives the quiet NaN.
module fsqrt
  import fp_pkg::*;
#(
  parameter int unsigned STAGES = 4,
  parameter int unsigned TAGW   = 5
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  fp64_t           a,
  input  logic [TAGW-1:0] tag_in,
  output logic            out_valid,
  output fp64_t           result,
  output logic [TAGW-1:0] tag_out
);
  fp64_t res_c;

  always_comb begin
    fp_unpacked_t       ua;
    logic signed [13:0] eu, ev, eh;
    logic               odd;
    logic [111:0]       rad;
    logic [57:0]        rem, trial;
    logic [55:0]        root;
    logic [55:0]        m;
    ua   = fp_unpack(a);
    eu   = $signed({3'b000, ua.exp}) - 14'sd1023;
    odd  = eu[0];
    rad  = odd ? ({58'd0, ua.mant, 1'b0} << 58) : ({59'd0, ua.mant} << 58);
    rem  = 58'd0;
    root = 56'd0;
    for (int i = 55; i >= 0; i--) begin
      rem   = {rem[55:0], rad[2*i+1], rad[2*i]};
      trial = {root, 2'b01};
      if (rem >= trial) begin
        rem  = rem - trial;
        root = {root[54:0], 1'b1};
      end else begin
        root = {root[54:0], 1'b0};
      end
    end
    ev = odd ? eu - 14'sd1 : eu;
    eh = (ev >>> 1) + 14'sd1023;
    m  = {root[55:1], root[0] | (rem != 58'd0)};
    if (ua.nan || (ua.sign && !ua.zero)) res_c = QNAN;
    else if (ua.zero)                    res_c = fp_zero(ua.sign);
    else if (ua.inf)                     res_c = fp_inf(1'b0);
    else                                 res_c = fp_round_pack(1'b0, eh, m);
  end

  pipe_delay #(.WIDTH(64 + TAGW), .STAGES(STAGES)) u_pipe (
    .clk, .rst_n,
    .in_valid (in_valid),
    .in_data  ({res_c, tag_in}),
    .out_valid(out_valid),
    .out_data ({result, tag_out})
  );
endmodule
