// ape: the Auxiliary Processing Element, which does all data movement for
// the PE.
//
// It holds the global instruction memory and its decoder (ape_global_ctrl),
// the local instruction memory and its decoder (ape_local_ctrl) and the 16 KB
// dual-ported local memory (LM). The global side uses LM port A to move blocks
// between the memory hierarchy and the LM; the local side uses LM port B to
// move words between the LM and the PE's register file. A start pulse runs
// the global program from address 0; the global program starts the local
// program, which starts the PE program, each waiting for the one it started.
// One program-load port writes either instruction memory (prog_sel); writes
// for the PE's own instruction memory pass through on pe_imem_*.
// The block list follows the source's description of the APE; the start
// chain between the programs and the load port are this implementation's own.
module ape
  import pe_pkg::*;
#(
  parameter int unsigned LM_DEPTH     = 2048,
  parameter int unsigned GIMEM_DEPTH  = 256,
  parameter int unsigned LIMEM_DEPTH  = 256
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              done,
  output logic              busy,
  // program load
  input  logic              prog_we,
  input  prog_sel_e         prog_sel,
  input  pc_t               prog_addr,
  input  logic [63:0]       prog_wdata,
  output logic              pe_imem_we,
  output pc_t               pe_imem_waddr,
  output logic [31:0]       pe_imem_wdata,
  // memory hierarchy
  output logic              ext_req,
  output logic              ext_we,
  output logic [EXT_AW-1:0] ext_addr,
  output word_t             ext_wdata,
  input  logic              ext_gnt,
  input  logic              ext_rvalid,
  input  word_t             ext_rdata,
  // PE
  output logic              pe_start,
  output pc_t               pe_pc,
  input  logic              pe_done,
  output logic              rf_we,
  output reg_t              rf_waddr,
  output word_t             rf_wdata,
  output reg_t              rf_raddr,
  input  word_t             rf_rdata
);
  pc_t         g_raddr, l_raddr;
  logic [63:0] g_rdata;
  logic [31:0] l_rdata;
  logic        a_en, a_we, b_en, b_we;
  lm_addr_t    a_addr, b_addr;
  word_t       a_wdata, a_rdata, b_wdata, b_rdata;
  logic        local_start, local_done, g_busy, l_busy;
  pc_t         local_pc;

  imem #(.DEPTH(GIMEM_DEPTH), .WIDTH(64), .AW(PCW)) u_gimem (
    .clk, .we(prog_we && prog_sel == PROG_GLOBAL), .waddr(prog_addr), .wdata(prog_wdata),
    .raddr(g_raddr), .rdata(g_rdata));

  imem #(.DEPTH(LIMEM_DEPTH), .WIDTH(32), .AW(PCW)) u_limem (
    .clk, .we(prog_we && prog_sel == PROG_LOCAL), .waddr(prog_addr), .wdata(prog_wdata[31:0]),
    .raddr(l_raddr), .rdata(l_rdata));

  assign pe_imem_we    = prog_we && prog_sel == PROG_PE;
  assign pe_imem_waddr = prog_addr;
  assign pe_imem_wdata = prog_wdata[31:0];

  ape_global_ctrl u_gctrl (
    .clk, .rst_n, .start, .done, .busy(g_busy),
    .imem_raddr(g_raddr), .imem_rdata(g_rdata),
    .lm_en(a_en), .lm_we(a_we), .lm_addr(a_addr), .lm_wdata(a_wdata), .lm_rdata(a_rdata),
    .ext_req, .ext_we, .ext_addr, .ext_wdata, .ext_gnt, .ext_rvalid, .ext_rdata,
    .local_start, .local_pc, .local_done);

  ape_local_ctrl u_lctrl (
    .clk, .rst_n, .start(local_start), .start_pc(local_pc), .done(local_done), .busy(l_busy),
    .imem_raddr(l_raddr), .imem_rdata(l_rdata),
    .lm_en(b_en), .lm_we(b_we), .lm_addr(b_addr), .lm_wdata(b_wdata), .lm_rdata(b_rdata),
    .rf_we, .rf_waddr, .rf_wdata, .rf_raddr, .rf_rdata,
    .pe_start, .pe_pc, .pe_done);

  local_mem #(.DEPTH(LM_DEPTH), .WIDTH(64), .AW(LM_AW)) u_lm (
    .clk,
    .a_en, .a_we, .a_addr, .a_wdata, .a_rdata,
    .b_en, .b_we, .b_addr, .b_wdata, .b_rdata);

  assign busy = g_busy | l_busy;
endmodule
