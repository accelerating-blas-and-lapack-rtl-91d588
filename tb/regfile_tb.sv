// regfile_tb: self-checking test of the register file.
//
// Checks the reset value, then performs random writes on both ports (with
// clashes on the same register, where port 0 must win) and random reads on
// all nine read ports against a reference array, including that a write is
// visible only after the clock edge.
module regfile_tb;
  localparam int NR = 32, NP = 9;
  logic                  clk = 0, rst_n = 0;
  logic [NP-1:0][4:0]    raddr = '0;
  logic [NP-1:0][63:0]   rdata;
  logic                  we0 = 0, we1 = 0;
  logic [4:0]            waddr0 = 0, waddr1 = 0;
  logic [63:0]           wdata0 = 0, wdata1 = 0;
  logic [63:0]           ref_q [NR];
  int                    checks = 0, failures = 0;

  regfile #(.NREGS(NR), .NREAD(NP)) dut (.*);

  always #5 clk = ~clk;

  task automatic check_reads();
    for (int p = 0; p < NP; p++) begin
      raddr[p] = 5'($urandom);
    end
    #1;
    for (int p = 0; p < NP; p++) begin
      checks++;
      if (rdata[p] !== ref_q[raddr[p]]) begin
        failures++;
        if (failures < 10) $display("FAIL port %0d reg %0d got %h want %h", p, raddr[p], rdata[p], ref_q[raddr[p]]);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < NR; i++) ref_q[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check_reads();
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      we0 = 1'($urandom); we1 = 1'($urandom);
      waddr0 = 5'($urandom); waddr1 = (n % 5 == 0) ? waddr0 : 5'($urandom);
      wdata0 = {$urandom, $urandom}; wdata1 = {$urandom, $urandom};
      check_reads();   // not yet written
      @(posedge clk);
      if (we1) ref_q[waddr1] = wdata1;
      if (we0) ref_q[waddr0] = wdata0;
      @(negedge clk);
      we0 = 0; we1 = 0;
      check_reads();
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
