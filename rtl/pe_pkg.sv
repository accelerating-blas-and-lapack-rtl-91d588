// pe_pkg: instruction sets, decoded-instruction and issue types shared by the
// PE, the auxiliary PE (APE) and the top level.
//
// Three programs drive the machine. The APE's global program moves blocks of
// double words between the external memory hierarchy and the local memory
// (LM) and starts the local program. The APE's local program moves single
// words between the LM and the PE's register file and starts the PE program.
// The PE program does the arithmetic. The encodings below are this design's
// own; the source names the units and a DOT4 instruction but gives no format.
package pe_pkg;

  localparam int unsigned NREGS  = 32;   // PE register file entries
  localparam int unsigned RW     = 5;    // register index width
  localparam int unsigned PCW    = 8;    // instruction address width (all three memories)
  localparam int unsigned LM_AW  = 11;   // 2048 double words = 16 KB local memory
  localparam int unsigned EXT_AW = 32;   // external (memory hierarchy) word address
  localparam int unsigned CNT_W  = 12;   // block-transfer word count

  typedef logic [63:0]     word_t;
  typedef logic [RW-1:0]   reg_t;
  typedef logic [PCW-1:0]  pc_t;
  typedef logic [LM_AW-1:0] lm_addr_t;

  // ---------------- PE instructions: [31:28] op [27:23] rd [22:18] rs1 [17:13] rs2
  typedef enum logic [3:0] {
    OP_NOP   = 4'd0,
    OP_FADD  = 4'd1,   // rd = rs1 + rs2
    OP_FSUB  = 4'd2,   // rd = rs1 - rs2
    OP_FMUL  = 4'd3,   // rd = rs1 * rs2
    OP_FDIV  = 4'd4,   // rd = rs1 / rs2
    OP_FSQRT = 4'd5,   // rd = sqrt(rs1)
    OP_DOT4  = 4'd6,   // rd = sum_{i=0..3} r[rs1+i] * r[rs2+i]
    OP_HALT  = 4'd15   // stop once every result is written
  } pe_op_e;

  typedef enum logic [2:0] {
    U_NONE = 3'd0,
    U_MUL  = 3'd1,
    U_ADD  = 3'd2,
    U_DIV  = 3'd3,
    U_SQRT = 3'd4,
    U_DOT4 = 3'd5
  } unit_e;

  typedef struct packed {
    unit_e unit;      // pipe that executes it, U_NONE for NOP/HALT
    logic  sub;       // FSUB on the adder
    reg_t  rd;
    reg_t  rs1;
    reg_t  rs2;
    logic  use_rs2;   // rs2 is read (not for FSQRT)
    logic  halt;
    logic  illegal;   // unknown opcode, executed as NOP
  } pe_dec_t;

  // Operation handed to the arithmetic unit. opa[i] = r[rs1+i], opb[i] = r[rs2+i];
  // scalar operations use opa[0] and opb[0].
  typedef struct packed {
    logic            valid;
    unit_e           unit;
    logic            sub;
    reg_t            rd;
    logic [3:0][63:0] opa;
    logic [3:0][63:0] opb;
  } fp_issue_t;

  typedef struct packed {
    logic [31:0] cycles;      // cycles from start to done
    logic [31:0] instrs;      // arithmetic instructions issued
    logic [31:0] dep_stalls;  // cycles lost to dependency (RAW/WAW) hazards
    logic [31:0] wb_stalls;   // cycles lost because the write-back cycle was taken
  } pe_perf_t;

  function automatic logic [31:0] pe_instr(pe_op_e op, reg_t rd, reg_t rs1, reg_t rs2);
    return {op, rd, rs1, rs2, 13'd0};
  endfunction

  // ---------------- APE local instructions: [31:28] op [27:23] reg [10:0] LM address / [7:0] PE pc
  typedef enum logic [3:0] {
    L_NOP   = 4'd0,
    L_LDRF  = 4'd1,   // r[reg] = LM[addr]
    L_STRF  = 4'd2,   // LM[addr] = r[reg]
    L_RUNPE = 4'd3,   // run the PE program at pc, wait for it
    L_END   = 4'd15   // local program finished
  } loc_op_e;

  function automatic logic [31:0] loc_instr(loc_op_e op, reg_t r, logic [10:0] addr);
    return {op, r, 12'd0, addr};
  endfunction

  // ---------------- APE global instructions:
  // [63:60] op [59:49] LM address [48:37] count [31:0] external address / [7:0] local pc
  typedef enum logic [3:0] {
    G_NOP      = 4'd0,
    G_LDLM     = 4'd1,  // LM[lm+k] = EXT[ext+k], k < count
    G_STLM     = 4'd2,  // EXT[ext+k] = LM[lm+k], k < count
    G_RUNLOCAL = 4'd3,  // run the local program at pc, wait for it
    G_HALT     = 4'd15
  } glb_op_e;

  function automatic logic [63:0] glb_instr(glb_op_e op, lm_addr_t lm, logic [CNT_W-1:0] cnt,
                                            logic [EXT_AW-1:0] ext);
    return {op, lm, cnt, 5'd0, ext};
  endfunction

  // Which instruction memory the program-load port writes.
  typedef enum logic [1:0] {
    PROG_GLOBAL = 2'd0,
    PROG_LOCAL  = 2'd1,
    PROG_PE     = 2'd2
  } prog_sel_e;

endpackage
