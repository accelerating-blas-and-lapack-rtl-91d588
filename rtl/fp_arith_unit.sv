// fp_arith_unit: the PE's floating-point arithmetic unit.
//
// Holds one pipe per operation type - FMUL, FADD (also FSUB), FDIV, FSQRT -
// and the DOT4 datapath of four multipliers and three adders. An issued
// operation (issue.valid) goes to the pipe named by issue.unit and carries its
// destination register as a tag. Latencies are MUL_STAGES, ADD_STAGES,
// DIV_STAGES, SQRT_STAGES and MUL_STAGES + 2*ADD_STAGES cycles. Results of
// all pipes merge into one write-back port (wb_valid, wb_rd, wb_data): the
// PE's issue logic reserves each operation's write-back cycle, so at most one
// pipe finishes per cycle, which an assertion checks. Separate pipes for each
// operation follow the source; the single merged write-back port is this
// implementation's choice.
module fp_arith_unit
  import fp_pkg::*;
  import pe_pkg::*;
#(
  parameter int unsigned MUL_STAGES  = 4,
  parameter int unsigned ADD_STAGES  = 4,
  parameter int unsigned DIV_STAGES  = 4,
  parameter int unsigned SQRT_STAGES = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  fp_issue_t issue,
  output logic      wb_valid,
  output reg_t      wb_rd,
  output word_t     wb_data
);
  logic  [4:0] v;
  fp64_t [4:0] r;
  reg_t  [4:0] t;

  fmul #(.STAGES(MUL_STAGES), .TAGW(RW)) u_fmul (
    .clk, .rst_n, .in_valid(issue.valid && issue.unit == U_MUL),
    .a(issue.opa[0]), .b(issue.opb[0]), .tag_in(issue.rd),
    .out_valid(v[0]), .result(r[0]), .tag_out(t[0]));

  fadd #(.STAGES(ADD_STAGES), .TAGW(RW)) u_fadd (
    .clk, .rst_n, .in_valid(issue.valid && issue.unit == U_ADD), .sub(issue.sub),
    .a(issue.opa[0]), .b(issue.opb[0]), .tag_in(issue.rd),
    .out_valid(v[1]), .result(r[1]), .tag_out(t[1]));

  fdiv #(.STAGES(DIV_STAGES), .TAGW(RW)) u_fdiv (
    .clk, .rst_n, .in_valid(issue.valid && issue.unit == U_DIV),
    .a(issue.opa[0]), .b(issue.opb[0]), .tag_in(issue.rd),
    .out_valid(v[2]), .result(r[2]), .tag_out(t[2]));

  fsqrt #(.STAGES(SQRT_STAGES), .TAGW(RW)) u_fsqrt (
    .clk, .rst_n, .in_valid(issue.valid && issue.unit == U_SQRT),
    .a(issue.opa[0]), .tag_in(issue.rd),
    .out_valid(v[3]), .result(r[3]), .tag_out(t[3]));

  dot4 #(.MUL_STAGES(MUL_STAGES), .ADD_STAGES(ADD_STAGES), .TAGW(RW)) u_dot4 (
    .clk, .rst_n, .in_valid(issue.valid && issue.unit == U_DOT4),
    .a(issue.opa), .b(issue.opb), .tag_in(issue.rd),
    .out_valid(v[4]), .result(r[4]), .tag_out(t[4]));

  always_comb begin
    wb_valid = |v;
    wb_rd    = '0;
    wb_data  = '0;
    for (int i = 0; i < 5; i++) begin
      if (v[i]) begin
        wb_rd   = t[i];
        wb_data = r[i];
      end
    end
  end

  a_one_wb: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(v))
    else $error("fp_arith_unit: two pipes finished in one cycle");
endmodule
