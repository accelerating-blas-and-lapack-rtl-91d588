// ape_local_ctrl_tb: self-checking test of the APE's local-program sequencer.
//
// Models the local instruction memory, the LM (port B) and the PE's register
// file around the controller, and a PE that runs for a random number of
// cycles and changes some registers. The program loads registers from the
// LM, runs the PE, stores registers back and ends. Checked: every register and
// LM word against a sequential model, the PE start address, that nothing
// touches the LM or the register file while the PE runs, that a load takes 2
// cycles and a store 1, and that done pulses once. Then 20 random programs
// of 40 LDRF/STRF/RUNPE instructions at random start addresses are run and
// checked the same way, word by word.
module ape_local_ctrl_tb;
  import pe_pkg::*;
  logic        clk = 0, rst_n = 0;
  logic        start = 0;
  pc_t         start_pc = 0;
  logic        done, busy;
  pc_t         imem_raddr;
  logic [31:0] imem_rdata;
  logic        lm_en, lm_we;
  lm_addr_t    lm_addr;
  word_t       lm_wdata, lm_rdata;
  logic        rf_we;
  reg_t        rf_waddr, rf_raddr;
  word_t       rf_wdata, rf_rdata;
  logic        pe_start;
  pc_t         pe_pc;
  logic        pe_done = 0;

  ape_local_ctrl dut (.*);

  always #5 clk = ~clk;

  logic [31:0] im [256];
  word_t       lm [2048];
  word_t       rf [32];
  word_t       m_lm [2048];
  word_t       m_rf [32];
  int          checks = 0, failures = 0, done_pulses = 0, pe_runs = 0;
  logic        pe_running = 0;
  pc_t         seen_pc;

  always_ff @(posedge clk) imem_rdata <= im[imem_raddr];
  always @(posedge clk) begin
    if (rst_n && lm_en && lm_we) lm[lm_addr] <= lm_wdata;
    if (lm_en && !lm_we) lm_rdata <= lm[lm_addr];
    if (rst_n && rf_we) rf[rf_waddr] <= rf_wdata;
    if (done) done_pulses++;
    if (pe_running && (lm_en || rf_we)) begin
      failures++;
      $display("FAIL LM or register file used while the PE runs");
    end
  end
  assign rf_rdata = rf[rf_raddr];

  // PE stand-in: doubles registers 0..3 (as bit patterns + 1) after a delay
  initial begin
    forever begin
      @(posedge clk);
      if (pe_start) begin
        seen_pc    = pe_pc;
        pe_runs++;
        pe_running = 1;
        repeat ($urandom_range(10, 3)) @(posedge clk);
        for (int i = 0; i < 4; i++) rf[i] = rf[i] + 64'd1;
        @(negedge clk);
        pe_done = 1;
        @(negedge clk);
        pe_done    = 0;
        pe_running = 0;
      end
    end
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    int     n;
    longint t0, t1;
    for (int i = 0; i < 2048; i++) begin lm[i] = {$urandom, $urandom}; m_lm[i] = lm[i]; end
    for (int i = 0; i < 32; i++) begin rf[i] = '0; m_rf[i] = '0; end
    for (int i = 0; i < 256; i++) im[i] = '0;
    // program at 16: 8 loads, RUNPE 0x42, 6 stores, NOP, END
    n = 16;
    for (int i = 0; i < 8; i++) begin
      lm_addr_t a;
      a = lm_addr_t'($urandom);
      im[n++] = loc_instr(L_LDRF, reg_t'(i), a);
      m_rf[i] = m_lm[a];
    end
    im[n++] = loc_instr(L_RUNPE, 0, 11'h042);
    for (int i = 0; i < 4; i++) m_rf[i] = m_rf[i] + 64'd1;
    for (int i = 0; i < 6; i++) begin
      im[n++] = loc_instr(L_STRF, reg_t'(i), 11'(1000 + i));
      m_lm[1000 + i] = m_rf[i];
    end
    im[n++] = loc_instr(L_NOP, 0, 0);
    im[n++] = loc_instr(L_END, 0, 0);

    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1; start_pc = 16;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    repeat (3) @(negedge clk);
    for (int i = 0; i < 32; i++) chk(rf[i] === m_rf[i], $sformatf("r%0d = %h want %h", i, rf[i], m_rf[i]));
    for (int i = 0; i < 2048; i++) chk(lm[i] === m_lm[i], $sformatf("LM[%0d]", i));
    chk(seen_pc == 8'h42, "PE start address");
    chk(pe_runs == 1, "PE started once");
    chk(done_pulses == 1, "done pulsed once");
    chk(!busy, "idle at the end");

    // timing: 4 loads then END; 4 stores then END
    for (int i = 0; i < 4; i++) im[100 + i] = loc_instr(L_LDRF, reg_t'(i), 11'(i));
    for (int i = 0; i < 4; i++) m_rf[i] = m_lm[i];
    im[104] = loc_instr(L_END, 0, 0);
    for (int i = 0; i < 4; i++) im[110 + i] = loc_instr(L_STRF, reg_t'(i), 11'(i));
    im[114] = loc_instr(L_END, 0, 0);
    @(negedge clk); start = 1; start_pc = 100; t0 = $time;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    t1 = $time;
    chk((t1 - t0) / 10 == 1 + 4 * 2, $sformatf("4 loads took %0d cycles", (t1 - t0) / 10 - 1));
    @(negedge clk); start = 1; start_pc = 110; t0 = $time;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    t1 = $time;
    chk((t1 - t0) / 10 == 1 + 4, $sformatf("4 stores took %0d cycles", (t1 - t0) / 10 - 1));
    repeat (3) @(negedge clk);

    for (int r = 0; r < 20; r++) begin
      int base, runs0, dp0, npe;
      base  = $urandom_range(200);
      runs0 = pe_runs;
      dp0   = done_pulses;
      npe   = 0;
      for (int k = 0; k < 40; k++) begin
        int       op;
        reg_t     rr;
        lm_addr_t a;
        op = $urandom_range(9);
        rr = reg_t'($urandom);
        a  = lm_addr_t'($urandom);
        if (op == 0) begin
          im[base + k] = loc_instr(L_RUNPE, 0, 11'(k));
          for (int i = 0; i < 4; i++) m_rf[i] = m_rf[i] + 64'd1;
          npe++;
        end else if (op < 5) begin
          im[base + k] = loc_instr(L_LDRF, rr, a);
          m_rf[rr] = m_lm[a];
        end else begin
          im[base + k] = loc_instr(L_STRF, rr, a);
          m_lm[a] = m_rf[rr];
        end
      end
      im[base + 40] = loc_instr(L_END, 0, 0);
      @(negedge clk); start = 1; start_pc = pc_t'(base);
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      repeat (3) @(negedge clk);
      for (int i = 0; i < 32; i++) chk(rf[i] === m_rf[i], $sformatf("random %0d: r%0d", r, i));
      for (int i = 0; i < 2048; i++) chk(lm[i] === m_lm[i], $sformatf("random %0d: LM[%0d]", r, i));
      chk(pe_runs == runs0 + npe, $sformatf("random %0d: PE runs", r));
      chk(done_pulses == dp0 + 1, $sformatf("random %0d: one done pulse", r));
    end
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
