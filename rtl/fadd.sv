// fadd: pipelined IEEE-754 binary64 adder/subtractor (the PE's FADD pipe).
//
// Computes a+b, or a-b when sub is set (b's sign is flipped). The operand
// with the larger magnitude is kept, the other significand is shifted right
// by the exponent difference into guard, round and sticky bits, the two are
// added or subtracted, the sum is renormalised (one place right after a
// carry, or left by the leading-zero count after cancellation) and rounded to
// nearest even. An exact zero sum is +0 (or -0 when both operands are -0).
// The result travels through STAGES registers: accepted in cycle t, out in
// cycle t+STAGES, one operation per cycle. The depth parameter follows the
// design's variable-depth pipes; the subtract input, the default depth of 4
// and the flush of subnormals to zero are this implementation's choices.
module fadd
  import fp_pkg::*;
#(
  parameter int unsigned STAGES = 4,
  parameter int unsigned TAGW   = 5
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic            sub,
  input  fp64_t           a,
  input  fp64_t           b,
  input  logic [TAGW-1:0] tag_in,
  output logic            out_valid,
  output fp64_t           result,
  output logic [TAGW-1:0] tag_out
);
  fp64_t res_c;

  always_comb begin
    fp_unpacked_t       ua, ub, ubig, usml;
    logic               sb, swap, eff_sub, sign;
    logic [11:0]        d;
    logic [5:0]         dsh;
    logic [55:0]        big_m, sml_m, shifted, lost_mask;
    logic               stk;
    logic [56:0]        sum;
    logic signed [13:0] e;
    logic [55:0]        m;
    int unsigned        lz;
    ua      = fp_unpack(a);
    ub      = fp_unpack(b);
    sb      = ub.sign ^ sub;
    ub.sign = sb;
    swap    = {ub.exp, ub.mant} > {ua.exp, ua.mant};
    ubig    = swap ? ub : ua;
    usml    = swap ? ua : ub;
    eff_sub = ua.sign ^ ub.sign;
    sign    = ubig.sign;
    d       = {1'b0, ubig.exp} - {1'b0, usml.exp};
    big_m   = {ubig.mant, 3'b000};
    sml_m   = {usml.mant, 3'b000};
    dsh       = d[5:0];
    lost_mask = (56'd1 << dsh) - 56'd1;
    if (d > 12'd56) begin
      shifted = 56'd0;
      stk     = 1'b1;
    end else begin
      shifted   = sml_m >> dsh;
      stk       = |(sml_m & lost_mask);
    end
    shifted[0] = shifted[0] | stk;
    e = $signed({3'b000, ubig.exp});
    if (eff_sub) sum = {1'b0, big_m} - {1'b0, shifted};
    else         sum = {1'b0, big_m} + {1'b0, shifted};
    m  = 56'd0;
    lz = 0;
    if (sum[56]) begin
      m = {sum[56:2], sum[1] | sum[0]};
      e = e + 14'sd1;
    end else begin
      for (int i = 0; i <= 55; i++) begin
        if (sum[i]) lz = 55 - i;
      end
      m = sum[55:0] << lz;
      e = e - 14'(lz);
    end
    if (ua.nan || ub.nan || (ua.inf && ub.inf && eff_sub)) res_c = QNAN;
    else if (ua.inf)                                       res_c = fp_inf(ua.sign);
    else if (ub.inf)                                       res_c = fp_inf(ub.sign);
    else if (ua.zero && ub.zero)                           res_c = fp_zero(ua.sign & ub.sign);
    else if (ub.zero)                                      res_c = {ua.sign, a[62:0]};
    else if (ua.zero)                                      res_c = {ub.sign, b[62:0]};
    else if (sum == 57'd0)                                 res_c = fp_zero(1'b0);
    else                                                   res_c = fp_round_pack(sign, e, m);
  end

  pipe_delay #(.WIDTH(64 + TAGW), .STAGES(STAGES)) u_pipe (
    .clk, .rst_n,
    .in_valid (in_valid),
    .in_data  ({res_c, tag_in}),
    .out_valid(out_valid),
    .out_data ({result, tag_out})
  );
endmodule
