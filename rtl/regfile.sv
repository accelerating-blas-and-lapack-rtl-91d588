// regfile: the PE's register file of NREGS double words.
//
// NREAD combinational read ports (the PE uses eight for the operands of a
// DOT4 and one for the APE's stores) and two synchronous write ports: port 0
// takes arithmetic results, port 1 takes words loaded from the local memory.
// A write is visible to reads in the next cycle. If both ports write one
// register in the same cycle, port 0 wins; the design never does this because
// the APE touches the file only while the PE is idle. All registers reset to
// +0.0. The source calls it "a small register file"; the size, the port count
// and the reset value are this implementation's choices.
module regfile #(
  parameter int unsigned NREGS = 32,
  parameter int unsigned NREAD = 9,
  parameter int unsigned AW    = $clog2(NREGS)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [NREAD-1:0][AW-1:0]   raddr,
  output logic [NREAD-1:0][63:0]     rdata,
  input  logic                       we0,
  input  logic [AW-1:0]              waddr0,
  input  logic [63:0]                wdata0,
  input  logic                       we1,
  input  logic [AW-1:0]              waddr1,
  input  logic [63:0]                wdata1
);
  logic [63:0] regs [NREGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
    end else begin
      if (we1) regs[waddr1] <= wdata1;
      if (we0) regs[waddr0] <= wdata0;
    end
  end

  always_comb begin
    for (int p = 0; p < NREAD; p++) rdata[p] = regs[raddr[p]];
  end
endmodule
