// lapack_pe_top_tb: end-to-end test of the whole design at its default
// parameters, running small instances of the BLAS/LAPACK kernels the
// architecture is meant for. Every kernel goes through all five steps:
// memory -> local memory -> registers -> compute -> registers -> local memory
// -> memory, and every result word is compared bit-exactly with a
// double-precision model evaluated in the same operation order.
//
//   DGEMM  C = A*B, 4x4: B's columns stay in registers, A is streamed a row
//          at a time, one DOT4 per element of C (Level-3 BLAS).
//   DDOT   inner product of two 1000-element vectors (Level-1 BLAS): both
//          vectors are held in the local memory at once (2000 of its 2048
//          words); 250 DOT4 + FADD steps in ten program batches.
//   NRM2   column scaling of a QR panel step: x / ||x||2 for 8 elements,
//          using DOT4, FADD, FSQRT and FDIV (plus one FMUL placed to collide
//          with a DOT4 write-back).
//   LU     4x4 right-looking LU factorisation without pivoting of a
//          diagonally dominant matrix: FDIV, FMUL, FSUB.
//   DGEMM  C = A*B at 100x100, far larger than the local memory: a row of A
//          and a column of B are streamed in per element of C, 25 DOT4 + FADD
//          steps each, with the global program reloaded 200 times. All 10,000
//          elements are checked; the cycle count and the PE's CPI are printed.
//          (About 15 million cycles.)
//
// Mechanisms counted, each must occur: issues to every pipe (FMUL, FADD,
// FSUB, FDIV, FSQRT, DOT4), dependency stalls, write-back stalls, memory
// requests waiting for a grant, PE runs, local-program runs.
module lapack_pe_top_tb;
  import fp_pkg::*;
  import pe_pkg::*;
  import tb_fp_pkg::*;

  logic              clk = 0, rst_n = 0;
  logic              start = 0;
  logic              done, busy;
  logic              prog_we = 0;
  prog_sel_e         prog_sel = PROG_GLOBAL;
  pc_t               prog_addr = 0;
  logic [63:0]       prog_wdata = 0;
  logic              ext_req, ext_we, ext_gnt, ext_rvalid;
  logic [EXT_AW-1:0] ext_addr;
  word_t             ext_wdata, ext_rdata;
  pe_perf_t          perf;

  lapack_pe_top dut (.*);

  ext_mem_model #(.DEPTH(32768)) u_mem (
    .clk, .rst_n, .req(ext_req), .we(ext_we), .addr(ext_addr), .wdata(ext_wdata),
    .gnt(ext_gnt), .rvalid(ext_rvalid), .rdata(ext_rdata));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_issue[6];
  int n_sub = 0, n_dep = 0, n_wb = 0, n_pe_runs = 0, n_local_runs = 0;
  longint n_pe_busy = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      if (dut.u_pe.do_issue) begin
        n_issue[dut.u_pe.dec.unit]++;
        if (dut.u_pe.dec.sub) n_sub++;
      end
      if (dut.u_pe.dep_hazard) n_dep++;
      if (dut.u_pe.wb_hazard) n_wb++;
      if (dut.u_pe.start && !dut.u_pe.busy) n_pe_runs++;
      if (dut.u_ape.local_start) n_local_runs++;
      if (dut.u_pe.busy) n_pe_busy++;
    end
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic load(input prog_sel_e s, input int a, input logic [63:0] w);
    @(negedge clk);
    prog_we = 1; prog_sel = s; prog_addr = pc_t'(a); prog_wdata = w;
    @(negedge clk);
    prog_we = 0;
  endtask

  task automatic load_all(input prog_sel_e s, input int base, input logic [63:0] p[$]);
    foreach (p[i]) load(s, base + i, p[i]);
  endtask

  task automatic run();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
  endtask

  function automatic logic [63:0] pe(pe_op_e op, int rd, int rs1, int rs2);
    return 64'(pe_instr(op, reg_t'(rd), reg_t'(rs1), reg_t'(rs2)));
  endfunction
  function automatic logic [63:0] lo(loc_op_e op, int r, int a);
    return 64'(loc_instr(op, reg_t'(r), 11'(a)));
  endfunction
  function automatic logic [63:0] gl(glb_op_e op, int lm, int n, int x);
    return glb_instr(op, lm_addr_t'(lm), 12'(n), 32'(x));
  endfunction

  function automatic real dot4r(real a[4], real b[4]);
    return ((a[0] * b[0]) + (a[1] * b[1])) + ((a[2] * b[2]) + (a[3] * b[3]));
  endfunction

  function automatic word_t fix(word_t r);
    if (r[62:52] == 11'h7FF && r[51:0] != 0) return QNAN;
    return r;
  endfunction

  // ---------------------------------------------------------------- DGEMM
  task automatic test_dgemm();
    logic [63:0] g[$], l[$], p[$];
    real a[4][4], b[4][4], ra[4], cb[4];
    for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
      u_mem.mem[4 * i + j]      = rand_fp(4);     // A row-major at 0
      u_mem.mem[16 + 4 * j + i] = rand_fp(4);     // B column-major at 16
      a[i][j] = b2r(u_mem.mem[4 * i + j]);
      b[i][j] = b2r(u_mem.mem[16 + 4 * j + i]);
    end
    p = '{pe(OP_DOT4, 4, 0, 16), pe(OP_DOT4, 5, 0, 20), pe(OP_DOT4, 6, 0, 24), pe(OP_DOT4, 7, 0, 28),
          pe(OP_HALT, 0, 0, 0)};
    l = {};
    for (int k = 0; k < 16; k++) l.push_back(lo(L_LDRF, 16 + k, 16 + k));
    for (int i = 0; i < 4; i++) begin
      for (int k = 0; k < 4; k++) l.push_back(lo(L_LDRF, k, 4 * i + k));
      l.push_back(lo(L_RUNPE, 0, 0));
      for (int k = 0; k < 4; k++) l.push_back(lo(L_STRF, 4 + k, 64 + 4 * i + k));
    end
    l.push_back(lo(L_END, 0, 0));
    g = '{gl(G_LDLM, 0, 32, 0), gl(G_RUNLOCAL, 0, 0, 0), gl(G_STLM, 64, 16, 32), gl(G_HALT, 0, 0, 0)};
    load_all(PROG_PE, 0, p);
    load_all(PROG_LOCAL, 0, l);
    load_all(PROG_GLOBAL, 0, g);
    run();
    for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
      word_t e;
      for (int k = 0; k < 4; k++) begin ra[k] = a[i][k]; cb[k] = b[k][j]; end
      e = r2b(dot4r(ra, cb));
      chk(u_mem.mem[32 + 4 * i + j] === e, $sformatf("DGEMM C[%0d][%0d] %h want %h", i, j, u_mem.mem[32 + 4 * i + j], e));
    end
  endtask

  // ---------------------------------------------------------------- DDOT
  task automatic test_ddot(input int n);
    localparam int XB = 1000, YB = 3000, RES = 5000;
    logic [63:0] g[$], l[$], p[$];
    real         acc, xa[4], ya[4];
    int          chunks, c;
    longint      t0, t1;
    chunks = n / 4;
    for (int i = 0; i < n; i++) begin
      u_mem.mem[XB + i] = rand_fp(3);
      u_mem.mem[YB + i] = rand_fp(3);
    end
    // PE: pc 0 clears the accumulator r31, pc 4 does one DOT4 step
    p = '{pe(OP_FSUB, 31, 31, 31), pe(OP_HALT, 0, 0, 0), pe(OP_NOP, 0, 0, 0), pe(OP_NOP, 0, 0, 0),
          pe(OP_DOT4, 8, 0, 4), pe(OP_FADD, 31, 31, 8), pe(OP_HALT, 0, 0, 0)};
    load_all(PROG_PE, 0, p);
    c  = 0;
    t0 = $time;
    for (int batch = 0; c < chunks; batch++) begin
      int segs;
      l = {};
      g = {};
      if (batch == 0) begin
        g.push_back(gl(G_LDLM, 0, n, XB));
        g.push_back(gl(G_LDLM, n, n, YB));
      end
      segs = 0;
      while (segs < 24 && c < chunks) begin
        g.push_back(gl(G_RUNLOCAL, 0, 0, 10 * segs));
        for (int k = 0; k < 4; k++) l.push_back(lo(L_LDRF, k, 4 * c + k));
        for (int k = 0; k < 4; k++) l.push_back(lo(L_LDRF, 4 + k, n + 4 * c + k));
        l.push_back(lo(L_RUNPE, 0, 4));
        l.push_back(lo(L_END, 0, 0));
        segs++;
        c++;
      end
      l.push_back(lo(L_RUNPE, 0, 0));            // pc 10*segs: clear r31
      l.push_back(lo(L_END, 0, 0));
      l.push_back(lo(L_STRF, 31, 2040));         // pc 10*segs+2: store r31
      l.push_back(lo(L_END, 0, 0));
      if (batch == 0) g.insert(2, gl(G_RUNLOCAL, 0, 0, 10 * segs));
      if (c == chunks) begin
        g.push_back(gl(G_RUNLOCAL, 0, 0, 10 * segs + 2));
        g.push_back(gl(G_STLM, 2040, 1, RES));
      end
      g.push_back(gl(G_HALT, 0, 0, 0));
      load_all(PROG_LOCAL, 0, l);
      load_all(PROG_GLOBAL, 0, g);
      run();
    end
    t1  = $time;
    acc = 0.0;
    for (int k = 0; k < chunks; k++) begin
      for (int i = 0; i < 4; i++) begin xa[i] = b2r(u_mem.mem[XB + 4 * k + i]); ya[i] = b2r(u_mem.mem[YB + 4 * k + i]); end
      acc = acc + dot4r(xa, ya);
    end
    chk(u_mem.mem[RES] === r2b(acc), $sformatf("DDOT n=%0d got %h want %h", n, u_mem.mem[RES], r2b(acc)));
    $display("DDOT n=%0d: %0d cycles including program loads", n, (t1 - t0) / 10);
  endtask

  // ---------------------------------------------------------------- NRM2 / scale
  task automatic test_nrm2();
    localparam int XB = 6000, OB = 6100;
    logic [63:0] g[$], l[$], p[$];
    real         x[8], s0[4], s1[4], nrm;
    for (int i = 0; i < 8; i++) begin u_mem.mem[XB + i] = rand_fp(6); x[i] = b2r(u_mem.mem[XB + i]); end
    p = {};
    p.push_back(pe(OP_DOT4, 8, 0, 0));
    for (int i = 0; i < 7; i++) p.push_back(pe(OP_NOP, 0, 0, 0));
    p.push_back(pe(OP_FMUL, 12, 0, 1));          // finishes in the DOT4's write-back cycle
    p.push_back(pe(OP_DOT4, 9, 4, 4));
    p.push_back(pe(OP_FADD, 10, 8, 9));
    p.push_back(pe(OP_FSQRT, 11, 10, 0));
    for (int i = 0; i < 8; i++) p.push_back(pe(OP_FDIV, i, i, 11));
    p.push_back(pe(OP_HALT, 0, 0, 0));
    l = {};
    for (int i = 0; i < 8; i++) l.push_back(lo(L_LDRF, i, 100 + i));
    l.push_back(lo(L_RUNPE, 0, 0));
    for (int i = 0; i < 8; i++) l.push_back(lo(L_STRF, i, 200 + i));
    l.push_back(lo(L_STRF, 11, 208));
    l.push_back(lo(L_STRF, 12, 209));
    l.push_back(lo(L_END, 0, 0));
    g = '{gl(G_LDLM, 100, 8, XB), gl(G_RUNLOCAL, 0, 0, 0), gl(G_STLM, 200, 10, OB), gl(G_HALT, 0, 0, 0)};
    load_all(PROG_PE, 0, p);
    load_all(PROG_LOCAL, 0, l);
    load_all(PROG_GLOBAL, 0, g);
    run();
    for (int i = 0; i < 4; i++) begin s0[i] = x[i]; s1[i] = x[4 + i]; end
    nrm = $sqrt(dot4r(s0, s0) + dot4r(s1, s1));
    chk(u_mem.mem[OB + 8] === r2b(nrm), "NRM2 norm");
    chk(u_mem.mem[OB + 9] === r2b(x[0] * x[1]), "NRM2 extra product");
    for (int i = 0; i < 8; i++)
      chk(u_mem.mem[OB + i] === r2b(x[i] / nrm), $sformatf("NRM2 x[%0d]/norm", i));
  endtask

  // ---------------------------------------------------------------- LU
  task automatic test_lu();
    localparam int AB = 7000, OB = 7100;
    logic [63:0] g[$], l[$], p[$];
    real         a[4][4], lf;
    int          tmp;
    for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
      word_t w;
      w = rand_fp(1);
      if (i == j) w = r2b(b2r(w) + ((b2r(w) > 0.0) ? 16.0 : -16.0));
      u_mem.mem[AB + 4 * i + j] = w;
      a[i][j] = b2r(w);
    end
    p   = {};
    tmp = 16;
    for (int k = 0; k < 3; k++)
      for (int i = k + 1; i < 4; i++) begin
        p.push_back(pe(OP_FDIV, 4 * i + k, 4 * i + k, 4 * k + k));
        for (int j = k + 1; j < 4; j++) begin
          p.push_back(pe(OP_FMUL, tmp, 4 * i + k, 4 * k + j));
          p.push_back(pe(OP_FSUB, 4 * i + j, 4 * i + j, tmp));
          tmp = (tmp == 31) ? 16 : tmp + 1;
        end
      end
    p.push_back(pe(OP_HALT, 0, 0, 0));
    l = {};
    for (int i = 0; i < 16; i++) l.push_back(lo(L_LDRF, i, 300 + i));
    l.push_back(lo(L_RUNPE, 0, 0));
    for (int i = 0; i < 16; i++) l.push_back(lo(L_STRF, i, 400 + i));
    l.push_back(lo(L_END, 0, 0));
    g = '{gl(G_LDLM, 300, 16, AB), gl(G_RUNLOCAL, 0, 0, 0), gl(G_STLM, 400, 16, OB), gl(G_HALT, 0, 0, 0)};
    load_all(PROG_PE, 0, p);
    load_all(PROG_LOCAL, 0, l);
    load_all(PROG_GLOBAL, 0, g);
    run();
    for (int k = 0; k < 3; k++)
      for (int i = k + 1; i < 4; i++) begin
        lf = a[i][k] / a[k][k];
        a[i][k] = lf;
        for (int j = k + 1; j < 4; j++) a[i][j] = a[i][j] - lf * a[k][j];
      end
    for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++)
      chk(u_mem.mem[OB + 4 * i + j] === r2b(a[i][j]), $sformatf("LU [%0d][%0d] %h want %h", i, j, u_mem.mem[OB + 4 * i + j], r2b(a[i][j])));
    $display("LU 4x4: PE %0d cycles, %0d instructions, %0d dependency stall cycles", perf.cycles, perf.instrs, perf.dep_stalls);
  endtask


  // ---------------------------------------------------------------- DGEMM, blocked
  // C = A*B for n x n matrices held in the memory model, far larger than the
  // local memory. A is row-major at 0, B column-major at 10000, C row-major
  // at 20000. The local program is the same for every element of C: 25 steps
  // of (8 LDRF, RUNPE) accumulate one element in r9, which goes to LM[2000].
  // Each global program loads one row of A, then for each of up to 50
  // columns loads the column of B, runs the local program and writes the
  // element back: the host reloads the global program 2n times.
  task automatic test_dgemm_blocked(input int n);
    localparam int AB = 0, BB = 10000, CB = 20000, JB = 50;
    logic [63:0] g[$], l[$], p[$];
    real         ra[4], cb[4], acc;
    longint      t0, t1, busy0, iss0, iss1;
    int          err;
    for (int i = 0; i < n * n; i++) begin
      u_mem.mem[AB + i] = rand_fp(3);
      u_mem.mem[BB + i] = rand_fp(3);
    end
    // PE: pc 0 starts the sum, pc 2 adds one DOT4 step to it
    p = '{pe(OP_DOT4, 9, 0, 4), pe(OP_HALT, 0, 0, 0),
          pe(OP_DOT4, 8, 0, 4), pe(OP_FADD, 9, 9, 8), pe(OP_HALT, 0, 0, 0)};
    l = {};
    for (int k = 0; k < n / 4; k++) begin
      for (int q = 0; q < 4; q++) l.push_back(lo(L_LDRF, q, 4 * k + q));
      for (int q = 0; q < 4; q++) l.push_back(lo(L_LDRF, 4 + q, n + 4 * k + q));
      l.push_back(lo(L_RUNPE, 0, (k == 0) ? 0 : 2));
    end
    l.push_back(lo(L_STRF, 9, 2000));
    l.push_back(lo(L_END, 0, 0));
    load_all(PROG_PE, 0, p);
    load_all(PROG_LOCAL, 0, l);
    t0    = $time;
    busy0 = n_pe_busy;
    iss0  = n_issue[U_DOT4] + n_issue[U_ADD];
    for (int i = 0; i < n; i++)
      for (int j0 = 0; j0 < n; j0 += JB) begin
        g = '{gl(G_LDLM, 0, n, AB + n * i)};
        for (int j = j0; j < j0 + JB && j < n; j++) begin
          g.push_back(gl(G_LDLM, n, n, BB + n * j));
          g.push_back(gl(G_RUNLOCAL, 0, 0, 0));
          g.push_back(gl(G_STLM, 2000, 1, CB + n * i + j));
        end
        g.push_back(gl(G_HALT, 0, 0, 0));
        load_all(PROG_GLOBAL, 0, g);
        run();
      end
    t1   = $time;
    iss1 = n_issue[U_DOT4] + n_issue[U_ADD];
    err  = 0;
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        for (int k = 0; k < n / 4; k++) begin
          for (int q = 0; q < 4; q++) begin
            ra[q] = b2r(u_mem.mem[AB + n * i + 4 * k + q]);
            cb[q] = b2r(u_mem.mem[BB + n * j + 4 * k + q]);
          end
          acc = (k == 0) ? dot4r(ra, cb) : acc + dot4r(ra, cb);
        end
        if (u_mem.mem[CB + n * i + j] !== r2b(acc)) err++;
        if (err == 1 && u_mem.mem[CB + n * i + j] !== r2b(acc))
          $display("DGEMM %0dx%0d C[%0d][%0d] %h want %h", n, n, i, j, u_mem.mem[CB + n * i + j], r2b(acc));
      end
    chk(err == 0, $sformatf("DGEMM %0dx%0d: %0d of %0d elements wrong", n, n, err, n * n));
    $display("DGEMM %0dx%0d: %0d cycles in all; PE busy %0d cycles for %0d instructions (CPI %0.2f)",
             n, n, (t1 - t0) / 10, n_pe_busy - busy0, iss1 - iss0,
             real'(n_pe_busy - busy0) / real'(iss1 - iss0));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    test_dgemm();
    test_ddot(1000);
    test_nrm2();
    test_lu();
    test_dgemm_blocked(100);
    chk(n_issue[U_MUL] > 0,  "FMUL used");
    chk(n_issue[U_ADD] > n_sub && n_sub > 0, "FADD and FSUB used");
    chk(n_issue[U_DIV] > 0,  "FDIV used");
    chk(n_issue[U_SQRT] > 0, "FSQRT used");
    chk(n_issue[U_DOT4] > 0, "DOT4 used");
    chk(n_dep > 0,           "dependency stalls happened");
    chk(n_wb > 0,            "write-back stalls happened");
    chk(u_mem.n_waits > 0,   "memory requests waited for a grant");
    chk(n_pe_runs > 0 && n_local_runs > 0, "PE and local program runs");
    $display("issues: FMUL %0d FADD %0d (FSUB %0d) FDIV %0d FSQRT %0d DOT4 %0d", n_issue[U_MUL], n_issue[U_ADD], n_sub,
             n_issue[U_DIV], n_issue[U_SQRT], n_issue[U_DOT4]);
    $display("stall cycles: dependency %0d, write-back %0d; memory grant waits %0d; PE runs %0d; local runs %0d",
             n_dep, n_wb, u_mem.n_waits, n_pe_runs, n_local_runs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
