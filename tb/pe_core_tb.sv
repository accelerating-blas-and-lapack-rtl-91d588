// pe_core_tb: self-checking test of the PE.
//
// 1. A two-instruction dependent chain (FMUL then an FADD that reads its
//    result): the FADD must wait exactly MUL_STAGES cycles (dependency
//    stall) and the run must take MUL_STAGES + ADD_STAGES + 3 cycles.
// 2. An FMUL followed by an independent FADD that would finish in the same
//    cycle: exactly one write-back stall.
// 3. Random programs of 200 instructions over all opcodes: the register file
//    afterwards must equal a sequential double-precision model of the
//    program, bit for bit, and both kinds of stall must have occurred.
// Registers are loaded and read through the APE-side port.
module pe_core_tb;
  import fp_pkg::*;
  import pe_pkg::*;
  import tb_fp_pkg::*;
  localparam int MS = 3, AS = 2, DS = 5, SS = 6;

  logic        clk = 0, rst_n = 0;
  logic        start = 0;
  pc_t         start_pc = 0;
  logic        done, busy;
  logic        imem_we = 0;
  pc_t         imem_waddr = 0;
  logic [31:0] imem_wdata = 0;
  logic        rf_we = 0;
  reg_t        rf_waddr = 0, rf_raddr = 0;
  word_t       rf_wdata = 0, rf_rdata;
  pe_perf_t    perf;

  pe_core #(.MUL_STAGES(MS), .ADD_STAGES(AS), .DIV_STAGES(DS), .SQRT_STAGES(SS)) dut (.*);

  always #5 clk = ~clk;

  int    checks = 0, failures = 0;
  word_t model_rf [32];

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic word_t fix(word_t r);
    if (r[62:52] == 11'h7FF && r[51:0] != 0) return QNAN;
    return r;
  endfunction

  task automatic model_exec(input logic [31:0] ins);
    reg_t d, s1, s2;
    real  p[4];
    d = ins[27:23]; s1 = ins[22:18]; s2 = ins[17:13];
    case (ins[31:28])
      OP_FADD:  model_rf[d] = fix(r2b(b2r(model_rf[s1]) + b2r(model_rf[s2])));
      OP_FSUB:  model_rf[d] = fix(r2b(b2r(model_rf[s1]) - b2r(model_rf[s2])));
      OP_FMUL:  model_rf[d] = fix(r2b(b2r(model_rf[s1]) * b2r(model_rf[s2])));
      OP_FDIV:  model_rf[d] = fix(r2b(b2r(model_rf[s1]) / b2r(model_rf[s2])));
      OP_FSQRT: model_rf[d] = fix(r2b($sqrt(b2r(model_rf[s1]))));
      OP_DOT4: begin
        for (int i = 0; i < 4; i++) p[i] = b2r(model_rf[5'(s1 + 5'(i))]) * b2r(model_rf[5'(s2 + 5'(i))]);
        model_rf[d] = fix(r2b((p[0] + p[1]) + (p[2] + p[3])));
      end
      default: ;
    endcase
  endtask

  task automatic load_prog(input logic [31:0] prog[$]);
    foreach (prog[i]) begin
      @(negedge clk);
      imem_we = 1; imem_waddr = pc_t'(i); imem_wdata = prog[i];
    end
    @(negedge clk);
    imem_we = 0;
  endtask

  task automatic load_regs();
    for (int i = 0; i < 32; i++) begin
      @(negedge clk);
      rf_we = 1; rf_waddr = reg_t'(i); rf_wdata = model_rf[i];
    end
    @(negedge clk);
    rf_we = 0;
  endtask

  task automatic run();
    @(negedge clk);
    start = 1; start_pc = 0;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
  endtask

  task automatic compare_regs(input string tag);
    for (int i = 0; i < 32; i++) begin
      rf_raddr = reg_t'(i);
      #1;
      checks++;
      if (rf_rdata !== model_rf[i]) begin
        failures++;
        if (failures < 20) $display("FAIL %s r%0d got %h want %h", tag, i, rf_rdata, model_rf[i]);
      end
    end
  endtask

  initial begin
    logic [31:0] prog[$];
    int          dep_total, wb_total;
    dep_total = 0; wb_total = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 32; i++) model_rf[i] = rand_fp(2);
    load_regs();

    // 1. dependent chain
    prog = '{pe_instr(OP_FMUL, 3, 1, 2), pe_instr(OP_FADD, 4, 3, 1), pe_instr(OP_HALT, 0, 0, 0)};
    load_prog(prog);
    run();
    foreach (prog[i]) model_exec(prog[i]);
    compare_regs("chain");
    chk(perf.dep_stalls == MS, $sformatf("chain dependency stalls %0d, want %0d", perf.dep_stalls, MS));
    chk(perf.instrs == 2, "chain instruction count");
    chk(perf.cycles == MS + AS + 3, $sformatf("chain cycles %0d, want %0d", perf.cycles, MS + AS + 3));

    // 2. write-back clash: FMUL (MS=3) then FADD (AS=2) one cycle later
    prog = '{pe_instr(OP_FMUL, 10, 1, 2), pe_instr(OP_FADD, 11, 5, 6), pe_instr(OP_HALT, 0, 0, 0)};
    load_prog(prog);
    run();
    foreach (prog[i]) model_exec(prog[i]);
    compare_regs("clash");
    chk(perf.wb_stalls == 1, $sformatf("write-back stalls %0d, want 1", perf.wb_stalls));
    chk(perf.dep_stalls == 0, "no dependency stall expected");

    // 3. random programs
    for (int r = 0; r < 6; r++) begin
      for (int i = 0; i < 32; i++) model_rf[i] = rand_fp(2);
      load_regs();
      prog = {};
      for (int i = 0; i < 200; i++) begin
        logic [3:0] op;
        op = 4'($urandom_range(6));
        prog.push_back({op, 5'($urandom), 5'($urandom), 5'($urandom), 13'd0});
      end
      prog.push_back(pe_instr(OP_HALT, 0, 0, 0));
      load_prog(prog);
      run();
      foreach (prog[i]) model_exec(prog[i]);
      compare_regs($sformatf("random %0d", r));
      dep_total += int'(perf.dep_stalls);
      wb_total  += int'(perf.wb_stalls);
      chk(perf.cycles >= perf.instrs, "cycles >= instructions");
    end
    chk(dep_total > 0, "random programs: dependency stalls seen");
    chk(wb_total > 0, "random programs: write-back stalls seen");
    $display("dependency stalls %0d, write-back stalls %0d", dep_total, wb_total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
