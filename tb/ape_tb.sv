// ape_tb: self-checking test of the APE as a whole.
//
// Loads the global and local programs through the program-load port (and
// one PE-program word, which must appear on the pass-through port), then
// runs: the global program copies 8 words from the memory model into the LM
// and runs the local program; the local program loads them into a register
// file stand-in, runs a PE stand-in (which negates the registers' sign bits)
// and stores them back to the LM; the global program writes them to memory.
// The memory contents are checked against the expected words. The local
// program sits at address 20, with an END at address 0, so a local start at
// the wrong address ends the run early and shows up in the checks.
module ape_tb;
  import pe_pkg::*;
  logic              clk = 0, rst_n = 0;
  logic              start = 0;
  logic              done, busy;
  logic              prog_we = 0;
  prog_sel_e         prog_sel = PROG_GLOBAL;
  pc_t               prog_addr = 0;
  logic [63:0]       prog_wdata = 0;
  logic              pe_imem_we;
  pc_t               pe_imem_waddr;
  logic [31:0]       pe_imem_wdata;
  logic              ext_req, ext_we, ext_gnt, ext_rvalid;
  logic [EXT_AW-1:0] ext_addr;
  word_t             ext_wdata, ext_rdata;
  logic              pe_start;
  pc_t               pe_pc;
  logic              pe_done = 0;
  logic              rf_we;
  reg_t              rf_waddr, rf_raddr;
  word_t             rf_wdata, rf_rdata;

  ape dut (.*);

  ext_mem_model #(.DEPTH(4096)) u_mem (
    .clk, .rst_n, .req(ext_req), .we(ext_we), .addr(ext_addr), .wdata(ext_wdata),
    .gnt(ext_gnt), .rvalid(ext_rvalid), .rdata(ext_rdata));

  always #5 clk = ~clk;

  word_t rf [32];
  int    checks = 0, failures = 0, pe_runs = 0, pe_imem_writes = 0;

  always @(posedge clk) begin
    if (rst_n && rf_we) rf[rf_waddr] <= rf_wdata;
    if (pe_imem_we) begin
      pe_imem_writes++;
      if (pe_imem_waddr != 8'd9 || pe_imem_wdata != 32'hCAFE_F00D) begin
        failures++;
        $display("FAIL PE program word passed through wrongly");
      end
    end
  end
  assign rf_rdata = rf[rf_raddr];

  initial begin
    forever begin
      @(posedge clk);
      if (pe_start) begin
        pe_runs++;
        repeat (5) @(posedge clk);
        for (int i = 0; i < 8; i++) rf[i][63] = ~rf[i][63];
        @(negedge clk); pe_done = 1;
        @(negedge clk); pe_done = 0;
      end
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

  initial begin
    for (int i = 0; i < 4096; i++) u_mem.mem[i] = {$urandom, $urandom};
    for (int i = 0; i < 32; i++) rf[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load(PROG_GLOBAL, 0, glb_instr(G_LDLM, 11'd64, 12'd8, 32'd300));
    load(PROG_GLOBAL, 1, glb_instr(G_RUNLOCAL, 0, 0, 32'd20));
    load(PROG_GLOBAL, 2, glb_instr(G_STLM, 11'd128, 12'd8, 32'd1000));
    load(PROG_GLOBAL, 3, glb_instr(G_HALT, 0, 0, 0));
    for (int i = 0; i < 8; i++) load(PROG_LOCAL, 20 + i, 64'(loc_instr(L_LDRF, reg_t'(i), 11'(64 + i))));
    load(PROG_LOCAL, 28, 64'(loc_instr(L_RUNPE, 0, 11'd3)));
    for (int i = 0; i < 8; i++) load(PROG_LOCAL, 29 + i, 64'(loc_instr(L_STRF, reg_t'(i), 11'(128 + i))));
    load(PROG_LOCAL, 37, 64'(loc_instr(L_END, 0, 0)));
    // A decoy END at local address 0 makes a wrong local start address visible.
    load(PROG_LOCAL, 0, 64'(loc_instr(L_END, 0, 0)));
    load(PROG_PE, 9, 64'h0000_0000_CAFE_F00D);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    for (int i = 0; i < 8; i++) begin
      word_t e;
      e = u_mem.mem[300 + i];
      e[63] = ~e[63];
      chk(u_mem.mem[1000 + i] === e, $sformatf("EXT[%0d] %h want %h", 1000 + i, u_mem.mem[1000 + i], e));
      chk(dut.u_lm.mem[64 + i] === u_mem.mem[300 + i], "LM copy of the input block");
    end
    chk(pe_runs == 1, "PE run once");
    chk(pe_imem_writes == 1, "one PE program word passed through");
    chk(!busy, "idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
