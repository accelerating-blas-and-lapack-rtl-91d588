// dot4: four-element inner product datapath behind the PE's DOT4 instruction.
//
// Four FMUL pipes form the products a[i]*b[i] in parallel; two FADD pipes add
// them in pairs, (a0b0 + a1b1) and (a2b2 + a3b3), and a third FADD adds the
// two partial sums. This is the three-level inner-product graph of the
// design (4 multipliers, then 2 adders, then 1). Every pipe accepts a new
// operation each cycle, so one DOT4 can start per cycle; the result leaves
// MUL_STAGES + 2*ADD_STAGES cycles after it was accepted, with its tag.
// The pairing follows the source's graph; the unit depths are parameters with
// this implementation's default of 4.
module dot4
  import fp_pkg::*;
#(
  parameter int unsigned MUL_STAGES = 4,
  parameter int unsigned ADD_STAGES = 4,
  parameter int unsigned TAGW       = 5
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [3:0][63:0] a,
  input  logic [3:0][63:0] b,
  input  logic [TAGW-1:0]  tag_in,
  output logic             out_valid,
  output fp64_t            result,
  output logic [TAGW-1:0]  tag_out
);
  fp64_t [3:0]     prod;
  logic  [3:0]     prod_v;
  logic [TAGW-1:0] prod_tag;
  fp64_t [1:0]     psum;
  logic  [1:0]     psum_v;
  logic [TAGW-1:0] psum_tag;

  // Only lane 0 carries the tag; the other lanes run in lock-step with it.
  fmul #(.STAGES(MUL_STAGES), .TAGW(TAGW)) u_mul0 (
    .clk, .rst_n, .in_valid, .a(a[0]), .b(b[0]), .tag_in,
    .out_valid(prod_v[0]), .result(prod[0]), .tag_out(prod_tag));
  fmul #(.STAGES(MUL_STAGES), .TAGW(1)) u_mul1 (
    .clk, .rst_n, .in_valid, .a(a[1]), .b(b[1]), .tag_in(1'b0),
    .out_valid(prod_v[1]), .result(prod[1]), .tag_out());
  fmul #(.STAGES(MUL_STAGES), .TAGW(1)) u_mul2 (
    .clk, .rst_n, .in_valid, .a(a[2]), .b(b[2]), .tag_in(1'b0),
    .out_valid(prod_v[2]), .result(prod[2]), .tag_out());
  fmul #(.STAGES(MUL_STAGES), .TAGW(1)) u_mul3 (
    .clk, .rst_n, .in_valid, .a(a[3]), .b(b[3]), .tag_in(1'b0),
    .out_valid(prod_v[3]), .result(prod[3]), .tag_out());

  fadd #(.STAGES(ADD_STAGES), .TAGW(TAGW)) u_add01 (
    .clk, .rst_n, .in_valid(prod_v[0]), .sub(1'b0), .a(prod[0]), .b(prod[1]), .tag_in(prod_tag),
    .out_valid(psum_v[0]), .result(psum[0]), .tag_out(psum_tag));
  fadd #(.STAGES(ADD_STAGES), .TAGW(1)) u_add23 (
    .clk, .rst_n, .in_valid(prod_v[2]), .sub(1'b0), .a(prod[2]), .b(prod[3]), .tag_in(1'b0),
    .out_valid(psum_v[1]), .result(psum[1]), .tag_out());

  fadd #(.STAGES(ADD_STAGES), .TAGW(TAGW)) u_add_root (
    .clk, .rst_n, .in_valid(psum_v[0]), .sub(1'b0), .a(psum[0]), .b(psum[1]), .tag_in(psum_tag),
    .out_valid, .result, .tag_out);

  // The lanes share one issue signal and equal depths, so they stay aligned.
  a_mul_lanes: assert property (@(posedge clk) disable iff (!rst_n) prod_v == '0 || prod_v == '1)
    else $error("dot4: multiplier lanes out of step");
  a_add_lanes: assert property (@(posedge clk) disable iff (!rst_n) psum_v[0] == psum_v[1])
    else $error("dot4: adder lanes out of step");
endmodule
