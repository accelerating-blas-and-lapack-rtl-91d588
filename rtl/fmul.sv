// fmul: pipelined IEEE-754 binary64 multiplier (the PE's FMUL pipe).
//
// The 53x53-bit significand product is normalised (the leading one lands in
// bit 105 or 104), the remaining bits become round and sticky bits and the
// package rounds to nearest even. The result and the operation's tag then
// travel through STAGES registers: an operation accepted with in_valid in
// cycle t leaves with out_valid in cycle t+STAGES, and a new operation can be
// accepted every cycle. The depth is a parameter because the pipeline depth of
// each floating-point unit is the quantity the architecture is tuned by; the
// default of 4 and the "compute, then register" structure are this
// implementation's choices. Special values: NaN or inf*0 give the quiet NaN,
// subnormals are flushed to zero (see fp_pkg).
module fmul
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
    logic [105:0]       prod;
    logic signed [13:0] e;
    logic [55:0]        m;
    ua   = fp_unpack(a);
    ub   = fp_unpack(b);
    s    = ua.sign ^ ub.sign;
    prod = {53'd0, ua.mant} * {53'd0, ub.mant};
    e    = $signed({3'b000, ua.exp}) + $signed({3'b000, ub.exp}) - 14'sd1023;
    if (prod[105]) begin
      m = {prod[105:51], |prod[50:0]};
      e = e + 14'sd1;
    end else begin
      m = {prod[104:50], |prod[49:0]};
    end
    if (ua.nan || ub.nan || (ua.inf && ub.zero) || (ua.zero && ub.inf)) res_c = QNAN;
    else if (ua.inf || ub.inf)                                          res_c = fp_inf(s);
    else if (ua.zero || ub.zero)                                        res_c = fp_zero(s);
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
