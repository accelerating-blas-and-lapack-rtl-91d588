// imem: an instruction memory of DEPTH words of WIDTH bits.
//
// Used three times: the PE's instruction memory and the APE's global and local
// instruction memories. A write port (we, waddr, wdata) loads the program
// from outside; the read port is synchronous: raddr presented in cycle t gives
// rdata in cycle t+1. The contents are not reset. The source names these
// memories but gives no sizes; DEPTH and WIDTH defaults are this
// implementation's choices (the APE global memory is built 64 bits wide).
module imem #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned WIDTH = 32,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
