// depth_sweep_tb: CPI against pipeline depth, the experiment the PE was
// built for, run on small in-register kernels.
//
// Ten PEs are built side by side, sharing their program-load and
// register-load inputs:
//   sweep 0 (instances 0-4): multiplier and adder at 1, 2, 4, 8 and 16
//            stages; divider and square root at 4;
//   sweep 1 (instances 5-9): divider and square root at 1, 2, 4, 8 and 16
//            stages; multiplier and adder at 4.
// Three kernels are loaded into all ten PEs and run together:
//   MM  3x3 matrix product with scalar FMUL and FADD;
//   LU  4x4 LU factorisation without pivoting (FDIV, FMUL, FSUB);
//   QR  column scaling of a QR step: x / ||x||2 over 8 elements
//       (FMUL, FADD tree, FSQRT, FDIV).
// For every instance, all 32 registers are compared with a sequential
// double-precision model of the program. The testbench checks that every
// depth issues the same instruction count. Where a kernel's dependences go
// through the pipes a sweep deepens, cycles must grow strictly with depth;
// deepening a pipe the kernel never uses (MM in sweep 1) must change nothing.
// The testbench prints the CPI table, cycles per issued arithmetic
// instruction. The kernels are this testbench's own small stand-ins for the
// 100x100 factorisations whose CPI curves motivate the design.
module depth_sweep_tb;
  import fp_pkg::*;
  import pe_pkg::*;
  import tb_fp_pkg::*;
  localparam int NI = 10;
  localparam int DEPTHS [5] = '{1, 2, 4, 8, 16};

  logic        clk = 0, rst_n = 0;
  logic        start = 0;
  pc_t         start_pc = 0;
  logic        imem_we = 0;
  pc_t         imem_waddr = 0;
  logic [31:0] imem_wdata = 0;
  logic        rf_we = 0;
  reg_t        rf_waddr = 0, rf_raddr = 0;
  word_t       rf_wdata = 0;
  logic        done_v [NI];
  logic        busy_v [NI];
  word_t       rdata_v [NI];
  pe_perf_t    perf_v [NI];

  for (genvar k = 0; k < NI; k++) begin : g_pe
    localparam int D  = DEPTHS[k % 5];
    localparam int MA = (k < 5) ? D : 4;
    localparam int DS = (k < 5) ? 4 : D;
    pe_core #(.MUL_STAGES(MA), .ADD_STAGES(MA), .DIV_STAGES(DS), .SQRT_STAGES(DS)) u_pe (
      .clk, .rst_n, .start, .start_pc, .done(done_v[k]), .busy(busy_v[k]),
      .imem_we, .imem_waddr, .imem_wdata, .rf_we, .rf_waddr, .rf_wdata,
      .rf_raddr, .rf_rdata(rdata_v[k]), .perf(perf_v[k]));
  end

  always #5 clk = ~clk;

  int          checks = 0, failures = 0;
  word_t       model_rf [32];
  logic [31:0] prog [$];
  longint      cyc [NI], ins [NI];

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic word_t fix(word_t r);
    if (r[62:52] == 11'h7FF && r[51:0] != 0) return QNAN;
    return r;
  endfunction

  task automatic model_exec(input logic [31:0] i);
    reg_t d, s1, s2;
    d = i[27:23]; s1 = i[22:18]; s2 = i[17:13];
    case (i[31:28])
      OP_FADD:  model_rf[d] = fix(r2b(b2r(model_rf[s1]) + b2r(model_rf[s2])));
      OP_FSUB:  model_rf[d] = fix(r2b(b2r(model_rf[s1]) - b2r(model_rf[s2])));
      OP_FMUL:  model_rf[d] = fix(r2b(b2r(model_rf[s1]) * b2r(model_rf[s2])));
      OP_FDIV:  model_rf[d] = fix(r2b(b2r(model_rf[s1]) / b2r(model_rf[s2])));
      OP_FSQRT: model_rf[d] = fix(r2b($sqrt(b2r(model_rf[s1]))));
      default: ;
    endcase
  endtask

  task automatic ins_push(pe_op_e op, int rd, int rs1, int rs2);
    prog.push_back(pe_instr(op, reg_t'(rd), reg_t'(rs1), reg_t'(rs2)));
  endtask

  // Loads prog and model_rf into every PE, runs them together, compares the
  // registers with the model and records cycles and instructions.
  task automatic run_kernel(input string name);
    logic fin [NI];
    foreach (prog[i]) begin
      @(negedge clk);
      imem_we = 1; imem_waddr = pc_t'(i); imem_wdata = prog[i];
    end
    for (int i = 0; i < 32; i++) begin
      @(negedge clk);
      imem_we = 0;
      rf_we = 1; rf_waddr = reg_t'(i); rf_wdata = model_rf[i];
    end
    @(negedge clk);
    rf_we = 0;
    start = 1; start_pc = 0;
    @(negedge clk);
    start = 0;
    for (int k = 0; k < NI; k++) fin[k] = 0;
    for (int n = 0; n < 20000; n++) begin
      int left;
      left = 0;
      for (int k = 0; k < NI; k++) begin
        if (done_v[k]) fin[k] = 1;
        if (!fin[k]) left++;
      end
      if (left == 0) break;
      @(negedge clk);
    end
    foreach (prog[i]) model_exec(prog[i]);
    for (int k = 0; k < NI; k++) begin
      chk(fin[k], $sformatf("%s: PE %0d finished", name, k));
      cyc[k] = longint'(perf_v[k].cycles);
      ins[k] = longint'(perf_v[k].instrs);
    end
    for (int r = 0; r < 32; r++) begin
      rf_raddr = reg_t'(r);
      #1;
      for (int k = 0; k < NI; k++)
        chk(rdata_v[k] === model_rf[r], $sformatf("%s: PE %0d r%0d got %h want %h", name, k, r, rdata_v[k], model_rf[r]));
    end
    for (int k = 1; k < NI; k++) chk(ins[k] == ins[0], $sformatf("%s: same instruction count at every depth", name));
    for (int s = 0; s < 2; s++) begin
      string line;
      line = $sformatf("%s %s CPI:", name, (s == 0) ? "FMUL/FADD depth" : "FDIV/FSQRT depth");
      for (int j = 0; j < 5; j++)
        line = {line, $sformatf("  %0d: %0.2f", DEPTHS[j], real'(cyc[5 * s + j]) / real'(ins[5 * s + j]))};
      $display("%s", line);
    end
  endtask

  task automatic chk_grows(input string name, input int s);
    for (int j = 1; j < 5; j++)
      chk(cyc[5 * s + j] > cyc[5 * s + j - 1], $sformatf("%s sweep %0d: cycles grow from depth %0d to %0d (%0d, %0d)",
          name, s, DEPTHS[j - 1], DEPTHS[j], cyc[5 * s + j - 1], cyc[5 * s + j]));
  endtask

  initial begin
    int t;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // MM: A in r0-r8, B in r9-r17, C in r18-r26, products in r27-r31
    for (int i = 0; i < 32; i++) model_rf[i] = rand_fp(3);
    prog = {};
    t = 27;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        int p0, p1, p2;
        p0 = t; t = (t == 31) ? 27 : t + 1;
        p1 = t; t = (t == 31) ? 27 : t + 1;
        p2 = t; t = (t == 31) ? 27 : t + 1;
        ins_push(OP_FMUL, p0, 3 * i, 9 + j);
        ins_push(OP_FMUL, p1, 3 * i + 1, 12 + j);
        ins_push(OP_FMUL, p2, 3 * i + 2, 15 + j);
        ins_push(OP_FADD, 18 + 3 * i + j, p0, p1);
        ins_push(OP_FADD, 18 + 3 * i + j, 18 + 3 * i + j, p2);
      end
    ins_push(OP_HALT, 0, 0, 0);
    run_kernel("MM");
    chk_grows("MM", 0);
    for (int j = 1; j < 5; j++) chk(cyc[5 + j] == cyc[5], "MM: divider and square-root depth change nothing");

    // LU: A in r0-r15 (diagonally dominant), products in r16-r31
    for (int i = 0; i < 32; i++) model_rf[i] = rand_fp(1);
    for (int i = 0; i < 4; i++)
      model_rf[5 * i] = r2b(b2r(model_rf[5 * i]) + ((b2r(model_rf[5 * i]) > 0.0) ? 16.0 : -16.0));
    prog = {};
    t = 16;
    for (int k = 0; k < 3; k++)
      for (int i = k + 1; i < 4; i++) begin
        ins_push(OP_FDIV, 4 * i + k, 4 * i + k, 5 * k);
        for (int j = k + 1; j < 4; j++) begin
          ins_push(OP_FMUL, t, 4 * i + k, 4 * k + j);
          ins_push(OP_FSUB, 4 * i + j, 4 * i + j, t);
          t = (t == 31) ? 16 : t + 1;
        end
      end
    ins_push(OP_HALT, 0, 0, 0);
    run_kernel("LU");
    chk_grows("LU", 0);
    chk_grows("LU", 1);

    // QR: x in r0-r7, squares in r8-r15, sum tree in r16-r22, norm in r23
    for (int i = 0; i < 32; i++) model_rf[i] = rand_fp(4);
    prog = {};
    for (int i = 0; i < 8; i++) ins_push(OP_FMUL, 8 + i, i, i);
    for (int i = 0; i < 4; i++) ins_push(OP_FADD, 16 + i, 8 + 2 * i, 9 + 2 * i);
    ins_push(OP_FADD, 20, 16, 17);
    ins_push(OP_FADD, 21, 18, 19);
    ins_push(OP_FADD, 22, 20, 21);
    ins_push(OP_FSQRT, 23, 22, 0);
    for (int i = 0; i < 8; i++) ins_push(OP_FDIV, i, i, 23);
    ins_push(OP_HALT, 0, 0, 0);
    run_kernel("QR");
    chk_grows("QR", 0);
    chk_grows("QR", 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
