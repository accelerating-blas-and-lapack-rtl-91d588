// local_mem_tb: self-checking test of the 16 KB dual-port local memory.
//
// Writes the whole memory through port A (2048 double words), reads it back
// through port B, then runs random traffic on both ports at once (including
// writes to the same address, where port A must win) against a reference
// array. Read data must arrive one cycle after the address and hold while
// the port is idle.
module local_mem_tb;
  localparam int D = 2048;
  logic        clk = 0;
  logic        a_en = 0, a_we = 0, b_en = 0, b_we = 0;
  logic [10:0] a_addr = 0, b_addr = 0;
  logic [63:0] a_wdata = 0, b_wdata = 0, a_rdata, b_rdata;
  logic [63:0] ref_q [D];
  int          checks = 0, failures = 0;

  local_mem dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input logic [63:0] got, input logic [63:0] want, input string what);
    checks++;
    if (got !== want) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %h want %h", what, got, want);
    end
  endtask

  initial begin
    logic [63:0] ea, eb;
    logic        ra, rb;
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      a_en = 1; a_we = 1; a_addr = 11'(i); a_wdata = {$urandom, $urandom}; ref_q[i] = a_wdata;
    end
    @(negedge clk);
    a_en = 0; a_we = 0;
    for (int i = 0; i < D; i++) begin
      b_en = 1; b_we = 0; b_addr = 11'(i);
      @(negedge clk);
      chk(b_rdata, ref_q[i], "port B readback");
    end
    b_en = 0;
    @(negedge clk);
    chk(b_rdata, ref_q[D-1], "port B hold");
    for (int n = 0; n < 4000; n++) begin
      a_en = 1'($urandom); a_we = 1'($urandom); a_addr = 11'($urandom_range(63)); a_wdata = {$urandom, $urandom};
      b_en = 1'($urandom); b_we = 1'($urandom); b_addr = (n % 7 == 0) ? a_addr : 11'($urandom_range(63)); b_wdata = {$urandom, $urandom};
      ra = a_en && !a_we; rb = b_en && !b_we;
      ea = ref_q[a_addr]; eb = ref_q[b_addr];
      @(posedge clk);
      if (b_en && b_we) ref_q[b_addr] = b_wdata;
      if (a_en && a_we) ref_q[a_addr] = a_wdata;
      @(negedge clk);
      if (ra) chk(a_rdata, ea, "port A read");
      if (rb) chk(b_rdata, eb, "port B read");
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
