// lapack_pe_top: the complete linear-algebra processing element - the PE
// with its floating-point pipes and the APE that feeds it.
//
// Operation, in five steps: (1) the APE's global program copies operands
// from the memory hierarchy into the local memory, (2) its local program
// loads them into the PE's register file, (3) the PE computes, leaving
// results in the register file, (4) the local program stores them to the
// local memory and (5) the global program writes them back to the memory
// hierarchy. Steps 2-4 may repeat as often as the programs say.
//
// Interface: load the three instruction memories through prog_* (prog_sel
// picks global, local or PE memory; 8-bit word address; global words are 64
// bits, the others use the low 32), then pulse start; done pulses when the
// global program reaches HALT. ext_* is the memory-hierarchy port (request
// held until grant, read data later with ext_rvalid, in order). perf reports
// the PE's cycle, instruction and stall counts for its last run.
// The pipe depths are parameters because they are what this architecture is
// tuned by; the defaults (4 each) are this implementation's choice.
module lapack_pe_top
  import pe_pkg::*;
#(
  parameter int unsigned MUL_STAGES  = 4,
  parameter int unsigned ADD_STAGES  = 4,
  parameter int unsigned DIV_STAGES  = 4,
  parameter int unsigned SQRT_STAGES = 4,
  parameter int unsigned LM_DEPTH    = 2048
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              done,
  output logic              busy,
  input  logic              prog_we,
  input  prog_sel_e         prog_sel,
  input  pc_t               prog_addr,
  input  logic [63:0]       prog_wdata,
  output logic              ext_req,
  output logic              ext_we,
  output logic [EXT_AW-1:0] ext_addr,
  output word_t             ext_wdata,
  input  logic              ext_gnt,
  input  logic              ext_rvalid,
  input  word_t             ext_rdata,
  output pe_perf_t          perf
);
  logic        pe_imem_we, pe_start, pe_done, pe_busy, ape_busy;
  pc_t         pe_imem_waddr, pe_pc;
  logic [31:0] pe_imem_wdata;
  logic        rf_we;
  reg_t        rf_waddr, rf_raddr;
  word_t       rf_wdata, rf_rdata;

  ape #(.LM_DEPTH(LM_DEPTH)) u_ape (
    .clk, .rst_n, .start, .done, .busy(ape_busy),
    .prog_we, .prog_sel, .prog_addr, .prog_wdata,
    .pe_imem_we, .pe_imem_waddr, .pe_imem_wdata,
    .ext_req, .ext_we, .ext_addr, .ext_wdata, .ext_gnt, .ext_rvalid, .ext_rdata,
    .pe_start, .pe_pc, .pe_done,
    .rf_we, .rf_waddr, .rf_wdata, .rf_raddr, .rf_rdata);

  pe_core #(
    .MUL_STAGES(MUL_STAGES), .ADD_STAGES(ADD_STAGES),
    .DIV_STAGES(DIV_STAGES), .SQRT_STAGES(SQRT_STAGES)
  ) u_pe (
    .clk, .rst_n, .start(pe_start), .start_pc(pe_pc), .done(pe_done), .busy(pe_busy),
    .imem_we(pe_imem_we), .imem_waddr(pe_imem_waddr), .imem_wdata(pe_imem_wdata),
    .rf_we, .rf_waddr, .rf_wdata, .rf_raddr, .rf_rdata,
    .perf);

  assign busy = ape_busy | pe_busy;
endmodule
