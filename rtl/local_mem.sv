// local_mem: the APE's local memory (LM), 16 KB of dual-ported storage.
//
// DEPTH words of WIDTH bits (2048 double words = 16 KB by default, the size
// the design is evaluated with). Port A serves the block transfers to and
// from the memory hierarchy, port B the word moves to and from the PE's
// register file. Each port is synchronous: with en set, a write stores wdata
// at the clock edge, and a read returns the word at addr in the next cycle;
// rdata holds its value while en is low. A read of an address written in the
// same cycle returns the old word. If both ports write one address in the
// same cycle, port A wins. Written as an array here; a real chip would use a
// dual-port SRAM macro, whose timing this model follows.
module local_mem #(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned WIDTH = 64,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             a_en,
  input  logic             a_we,
  input  logic [AW-1:0]    a_addr,
  input  logic [WIDTH-1:0] a_wdata,
  output logic [WIDTH-1:0] a_rdata,
  input  logic             b_en,
  input  logic             b_we,
  input  logic [AW-1:0]    b_addr,
  input  logic [WIDTH-1:0] b_wdata,
  output logic [WIDTH-1:0] b_rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (b_en && b_we) mem[b_addr] <= b_wdata;
    if (a_en && a_we) mem[a_addr] <= a_wdata;
    if (a_en && !a_we) a_rdata <= mem[a_addr];
    if (b_en && !b_we) b_rdata <= mem[b_addr];
  end
endmodule
