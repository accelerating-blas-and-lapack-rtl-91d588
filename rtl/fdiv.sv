// fdiv: pipelined IEEE-754 binary64 divider (the PE's FDIV pipe).
//
// The significand quotient is formed by restoring long division, one quotient
// bit per step, 57 steps unrolled into one block of logic: bit 56 of the
// quotient is ma>=mb, and each later bit compares the doubled partial
// remainder with mb. The quotient has its leading one in bit 56 or 55; the
// final remainder is folded into the sticky bit and the package rounds to
// nearest even. The result then travels through STAGES registers (accepted in
// cycle t, out in cycle t+STAGES, one division per cycle). The division
// algorithm, the register-chain structure and the default depth of 4 are this
// implementation's choices. Special values: x/0 gives inf (0/0 gives NaN),
// inf/inf and NaN operands give the quiet NaN, x/inf gives zero.
module fdiv
  import fp_pkg::*;
#(
  parameter int unsigned STAGES = 4,
  parameter int unsigned TAGW   = 5
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  fp64_t           a,
  input  fp64_t           b,
  input  logic [TAGW-1:0] tag_in,
  output logic            out_valid,
  output fp64_t           result,
  output logic [TAGW-1:0] tag_out
);
  fp64_t res_c;

  always_comb begin
    fp_unpacked_t       ua, ub;
    logic               s;
    logic [54:0]        rem;
    logic [56:0]        q;
    logic signed [13:0] e;
    logic [55:0]        m;
    ua  = fp_unpack(a);
    ub  = fp_unpack(b);
    s   = ua.sign ^ ub.sign;
    rem = {2'b00, ua.mant};
    q   = 57'd0;
    for (int i = 56; i >= 0; i--) begin
      if (rem >= {2'b00, ub.mant}) begin
        q[i] = 1'b1;
        rem  = rem - {2'b00, ub.mant};
      end
      rem = rem << 1;
    end
    e = $signed({3'b000, ua.exp}) - $signed({3'b000, ub.exp}) + 14'sd1023;
    if (q[56]) begin
      m = {q[56:2], q[1] | q[0] | (rem != 55'd0)};
    end else begin
      m = {q[55:1], q[0] | (rem != 55'd0)};
      e = e - 14'sd1;
    end
    if (ua.nan || ub.nan || (ua.inf && ub.inf) || (ua.zero && ub.zero)) res_c = QNAN;
    else if (ua.inf || ub.zero)                                         res_c = fp_inf(s);
    else if (ua.zero || ub.inf)                                         res_c = fp_zero(s);
    else                                                                res_c = fp_round_pack(s, e, m);
  end

  pipe_delay #(.WIDTH(64 + TAGW), .STAGES(STAGES)) u_pipe (
    .clk, .rst_n,
    .in_valid (in_valid),
    .in_data  ({res_c, tag_in}),
    .out_valid(out_valid),
    .out_data ({result, tag_out})
  );
endmodule
