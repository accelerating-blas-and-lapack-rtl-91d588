// ape_global_ctrl_tb: self-checking test of the APE's global-program
// sequencer.
//
// Models the global instruction memory and the LM (port A) around the
// controller, uses the behavioural memory-hierarchy model (random grant
// delays and read latencies) and a local-program stand-in that transforms
// LM words. The program loads a block into the LM, runs the local program,
// stores a block back, does a zero-length transfer and halts. Checked: the LM
// and memory contents against a sequential model, the local start address,
// that requests wait for grants (the model's wait counter) and that done
// pulses once. Then 20 random programs of six LDLM/STLM transfers (random
// LM and memory addresses, 0 to 64 words) run back to back; after each, every
// LM and memory word is compared with the model, and the request counts and
// the single done pulse are checked.
module ape_global_ctrl_tb;
  import pe_pkg::*;
  logic              clk = 0, rst_n = 0;
  logic              start = 0;
  logic              done, busy;
  pc_t               imem_raddr;
  logic [63:0]       imem_rdata;
  logic              lm_en, lm_we;
  lm_addr_t          lm_addr;
  word_t             lm_wdata, lm_rdata;
  logic              ext_req, ext_we, ext_gnt, ext_rvalid;
  logic [EXT_AW-1:0] ext_addr;
  word_t             ext_wdata, ext_rdata;
  logic              local_start;
  pc_t               local_pc;
  logic              local_done = 0;

  ape_global_ctrl dut (.*);

  ext_mem_model #(.DEPTH(4096)) u_mem (
    .clk, .rst_n, .req(ext_req), .we(ext_we), .addr(ext_addr), .wdata(ext_wdata),
    .gnt(ext_gnt), .rvalid(ext_rvalid), .rdata(ext_rdata));

  always #5 clk = ~clk;

  logic [63:0] im [256];
  word_t       lm [2048];
  word_t       m_lm [2048];
  word_t       m_ext [4096];
  int          checks = 0, failures = 0, done_pulses = 0, local_runs = 0;
  pc_t         seen_pc;

  always_ff @(posedge clk) imem_rdata <= im[imem_raddr];
  always @(posedge clk) begin
    if (rst_n && lm_en && lm_we) lm[lm_addr] <= lm_wdata;
    if (rst_n && lm_en && !lm_we) lm_rdata <= lm[lm_addr];
    if (done) done_pulses++;
  end

  // local-program stand-in: LM[200+i] = LM[10+i] + 5 for i < 20
  initial begin
    forever begin
      @(posedge clk);
      if (local_start) begin
        seen_pc = local_pc;
        local_runs++;
        repeat ($urandom_range(8, 2)) @(posedge clk);
        for (int i = 0; i < 20; i++) lm[200 + i] = lm[10 + i] + 64'd5;
        @(negedge clk);
        local_done = 1;
        @(negedge clk);
        local_done = 0;
      end
    end
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic compare_mems(input string tag);
    for (int i = 0; i < 2048; i++) chk(lm[i] === m_lm[i], $sformatf("%s: LM[%0d] %h want %h", tag, i, lm[i], m_lm[i]));
    for (int i = 0; i < 4096; i++)
      chk(u_mem.mem[i] === m_ext[i], $sformatf("%s: EXT[%0d] %h want %h", tag, i, u_mem.mem[i], m_ext[i]));
  endtask

  initial begin
    for (int i = 0; i < 4096; i++) begin u_mem.mem[i] = {$urandom, $urandom}; m_ext[i] = u_mem.mem[i]; end
    for (int i = 0; i < 2048; i++) begin lm[i] = '0; m_lm[i] = '0; end
    for (int i = 0; i < 256; i++) im[i] = '0;
    im[0] = glb_instr(G_LDLM, 11'd10, 12'd20, 32'd100);
    im[1] = glb_instr(G_NOP, 0, 0, 0);
    im[2] = glb_instr(G_RUNLOCAL, 0, 0, 32'h37);
    im[3] = glb_instr(G_STLM, 11'd200, 12'd20, 32'd500);
    im[4] = glb_instr(G_LDLM, 11'd50, 12'd0, 32'd0);
    im[5] = glb_instr(G_STLM, 11'd10, 12'd1, 32'd4095);
    im[6] = glb_instr(G_HALT, 0, 0, 0);
    for (int i = 0; i < 20; i++) m_lm[10 + i] = m_ext[100 + i];
    for (int i = 0; i < 20; i++) m_lm[200 + i] = m_lm[10 + i] + 64'd5;
    for (int i = 0; i < 20; i++) m_ext[500 + i] = m_lm[200 + i];
    m_ext[4095] = m_lm[10];

    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    repeat (3) @(negedge clk);
    compare_mems("directed");
    chk(u_mem.n_reads == 20, $sformatf("reads %0d want 20", u_mem.n_reads));
    chk(u_mem.n_writes == 21, $sformatf("writes %0d want 21", u_mem.n_writes));
    chk(u_mem.n_waits > 0, "some requests waited for a grant");
    chk(seen_pc == 8'h37, "local start address");
    chk(local_runs == 1, "local program run once");
    chk(done_pulses == 1, "done pulsed once");
    chk(!busy, "idle at the end");

    for (int r = 0; r < 20; r++) begin
      int nr, nw, np;
      nr = u_mem.n_reads; nw = u_mem.n_writes; np = done_pulses;
      for (int t = 0; t < 6; t++) begin
        int lma, n, xa;
        logic ld;
        ld  = ($urandom_range(1) == 1);
        lma = $urandom_range(2048 - 64);
        n   = $urandom_range(64);
        xa  = $urandom_range(4096 - 64);
        im[t] = glb_instr(ld ? G_LDLM : G_STLM, lm_addr_t'(lma), 12'(n), 32'(xa));
        for (int k = 0; k < n; k++)
          if (ld) m_lm[lma + k] = m_ext[xa + k];
          else    m_ext[xa + k] = m_lm[lma + k];
        if (ld) nr += n; else nw += n;
      end
      im[6] = glb_instr(G_HALT, 0, 0, 0);
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      repeat (3) @(negedge clk);
      compare_mems($sformatf("random %0d", r));
      chk(u_mem.n_reads == nr && u_mem.n_writes == nw, $sformatf("random %0d: request counts", r));
      chk(done_pulses == np + 1, $sformatf("random %0d: one done pulse", r));
    end
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
