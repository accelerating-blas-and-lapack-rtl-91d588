// pe_core: the Processing Element (PE).
//
// A scalar, in-order machine: instruction memory -> decoder -> issue ->
// floating-point arithmetic unit -> register file. After a start pulse it
// runs the program from start_pc until HALT, waits until every result in
// flight has been written and then pulses done.
//
// Fetch: the instruction memory is read synchronously at the address of the
// next instruction, so the instruction at pc is always on its output and a
// new instruction can issue every cycle.
//
// Issue and hazards: the PE has no forwarding. A scoreboard keeps one busy
// bit per register whose result is still in a pipe. An arithmetic
// instruction waits while any register it reads (for DOT4: rs1..rs1+3 and
// rs2..rs2+3) or its destination is busy - a dependency hazard, the stall
// the pipeline-depth trade-off is about. Because the pipes have different
// depths, a shift register of reserved write-back cycles makes an instruction
// also wait when another result already owns the cycle its own result would
// be written in (a write-back stall). A consumer issues in the cycle after
// its producer's write-back.
//
// Latencies: FMUL MUL_STAGES, FADD/FSUB ADD_STAGES, FDIV DIV_STAGES, FSQRT
// SQRT_STAGES, DOT4 MUL_STAGES+2*ADD_STAGES cycles from issue to write-back.
//
// The APE side loads registers (rf_we/rf_waddr/rf_wdata) and reads them for
// stores (rf_raddr/rf_rdata, combinational) while the PE is idle. perf counts
// cycles, issued arithmetic instructions and both kinds of stall cycle, from
// which the cycles per instruction of a run follows; the counters clear at
// start. The units, the register file, the instruction memory and decoder
// follow the source; the scoreboard, the write-back reservation and the
// counters are this implementation's choices.
module pe_core
  import fp_pkg::*;
  import pe_pkg::*;
#(
  parameter int unsigned MUL_STAGES  = 4,
  parameter int unsigned ADD_STAGES  = 4,
  parameter int unsigned DIV_STAGES  = 4,
  parameter int unsigned SQRT_STAGES = 4,
  parameter int unsigned IMEM_DEPTH  = 256
) (
  input  logic     clk,
  input  logic     rst_n,
  // control
  input  logic     start,
  input  pc_t      start_pc,
  output logic     done,
  output logic     busy,
  // program load
  input  logic     imem_we,
  input  pc_t      imem_waddr,
  input  logic [31:0] imem_wdata,
  // register file access from the APE
  input  logic     rf_we,
  input  reg_t     rf_waddr,
  input  word_t    rf_wdata,
  input  reg_t     rf_raddr,
  output word_t    rf_rdata,
  // performance counters
  output pe_perf_t perf
);
  localparam int unsigned LAT_DOT4 = MUL_STAGES + 2 * ADD_STAGES;
  localparam int unsigned MAXLAT_A = (MUL_STAGES > ADD_STAGES) ? MUL_STAGES : ADD_STAGES;
  localparam int unsigned MAXLAT_B = (DIV_STAGES > SQRT_STAGES) ? DIV_STAGES : SQRT_STAGES;
  localparam int unsigned MAXLAT_C = (MAXLAT_A > MAXLAT_B) ? MAXLAT_A : MAXLAT_B;
  localparam int unsigned MAXLAT   = (MAXLAT_C > LAT_DOT4) ? MAXLAT_C : LAT_DOT4;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;

  state_e             state_q;
  pc_t                pc_q;
  logic [31:0]        instr;
  pc_t                fetch_addr;
  pe_dec_t            dec;
  logic [NREGS-1:0]   sb_q;        // scoreboard: result in flight
  logic [MAXLAT:0]    wbres_q;     // bit k: a write-back happens k cycles from now
  logic [8:0][RW-1:0] raddr;
  logic [8:0][63:0]   rdata;
  fp_issue_t          iss;
  logic               wb_valid;
  reg_t               wb_rd;
  word_t              wb_data;
  logic               is_arith, dep_hazard, wb_hazard, do_issue, advance;
  int unsigned        lat;

  imem #(.DEPTH(IMEM_DEPTH), .WIDTH(32), .AW(PCW)) u_imem (
    .clk, .we(imem_we), .waddr(imem_waddr), .wdata(imem_wdata),
    .raddr(fetch_addr), .rdata(instr));

  pe_decoder u_dec (.instr, .dec);

  // operand read ports 0-3: rs1..rs1+3, 4-7: rs2..rs2+3, 8: APE store
  always_comb begin
    for (int i = 0; i < 4; i++) begin
      raddr[i]     = dec.rs1 + RW'(i);
      raddr[4 + i] = dec.rs2 + RW'(i);
    end
    raddr[8] = rf_raddr;
  end

  regfile #(.NREGS(NREGS), .NREAD(9), .AW(RW)) u_rf (
    .clk, .rst_n, .raddr, .rdata,
    .we0(wb_valid), .waddr0(wb_rd), .wdata0(wb_data),
    .we1(rf_we), .waddr1(rf_waddr), .wdata1(rf_wdata));

  assign rf_rdata = rdata[8];

  // hazard detection
  always_comb begin
    logic [NREGS-1:0] need;
    need = '0;
    unique case (dec.unit)
      U_MUL:   lat = MUL_STAGES;
      U_ADD:   lat = ADD_STAGES;
      U_DIV:   lat = DIV_STAGES;
      U_SQRT:  lat = SQRT_STAGES;
      U_DOT4:  lat = LAT_DOT4;
      default: lat = 0;
    endcase
    is_arith = (state_q == S_RUN) && (dec.unit != U_NONE);
    need[dec.rs1] = 1'b1;
    if (dec.use_rs2) need[dec.rs2] = 1'b1;
    if (dec.unit == U_DOT4) begin
      for (int i = 1; i < 4; i++) begin
        need[dec.rs1 + RW'(i)] = 1'b1;
        need[dec.rs2 + RW'(i)] = 1'b1;
      end
    end
    need[dec.rd] = 1'b1;
    dep_hazard = is_arith && ((need & sb_q) != '0);
    wb_hazard  = is_arith && !dep_hazard && wbres_q[lat];
    do_issue   = is_arith && !dep_hazard && !wb_hazard;
    advance    = (state_q == S_RUN) && !dec.halt && (dec.unit == U_NONE || do_issue);
  end

  always_comb begin
    iss       = '0;
    iss.valid = do_issue;
    iss.unit  = dec.unit;
    iss.sub   = dec.sub;
    iss.rd    = dec.rd;
    for (int i = 0; i < 4; i++) begin
      iss.opa[i] = rdata[i];
      iss.opb[i] = rdata[4 + i];
    end
  end

  fp_arith_unit #(
    .MUL_STAGES(MUL_STAGES), .ADD_STAGES(ADD_STAGES),
    .DIV_STAGES(DIV_STAGES), .SQRT_STAGES(SQRT_STAGES)
  ) u_fpu (.clk, .rst_n, .issue(iss), .wb_valid, .wb_rd, .wb_data);

  always_comb begin
    if (state_q == S_IDLE) fetch_addr = start_pc;
    else if (advance)      fetch_addr = pc_q + 1'b1;
    else                   fetch_addr = pc_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      pc_q    <= '0;
      sb_q    <= '0;
      wbres_q <= '0;
      done    <= 1'b0;
      perf    <= '0;
    end else begin
      done    <= 1'b0;
      pc_q    <= fetch_addr;
      wbres_q <= (wbres_q >> 1) | (do_issue ? (MAXLAT+1)'(1) << (lat - 1) : '0);
      if (wb_valid) sb_q[wb_rd] <= 1'b0;
      if (do_issue) sb_q[dec.rd] <= 1'b1;
      if (state_q != S_IDLE) perf.cycles <= perf.cycles + 1;
      if (do_issue)   perf.instrs     <= perf.instrs + 1;
      if (dep_hazard) perf.dep_stalls <= perf.dep_stalls + 1;
      if (wb_hazard)  perf.wb_stalls  <= perf.wb_stalls + 1;
      unique case (state_q)
        S_IDLE: if (start) begin
          state_q <= S_RUN;
          perf    <= '0;
        end
        S_RUN: if (dec.halt) state_q <= S_DRAIN;
        S_DRAIN: if (sb_q == '0 && wbres_q == '0) begin
          state_q <= S_IDLE;
          done    <= 1'b1;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign busy = (state_q != S_IDLE);

  // every result leaves its pipe in the cycle reserved for it
  a_wb_slot: assert property (@(posedge clk) disable iff (!rst_n) wb_valid == wbres_q[0])
    else $error("pe_core: write-back outside its reserved cycle");
  a_rf_port: assert property (@(posedge clk) disable iff (!rst_n) !(wb_valid && rf_we))
    else $error("pe_core: APE write while a result is written");
endmodule
