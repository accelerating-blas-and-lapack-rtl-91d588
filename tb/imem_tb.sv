// imem_tb: self-checking test of the instruction memory.
//
// Fills the 256 x 32 memory through its write port, then reads every address
// in random order and checks the data arrives exactly one cycle after the
// address, and that a rewrite of one word is seen by a later read.
module imem_tb;
  localparam int D = 256, W = 32;
  logic         clk = 0;
  logic         we = 0;
  logic [7:0]   waddr = 0, raddr = 0;
  logic [W-1:0] wdata = 0, rdata;
  logic [W-1:0] ref_q [D];
  int           checks = 0, failures = 0;

  imem #(.DEPTH(D), .WIDTH(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      we = 1; waddr = 8'(i); wdata = $urandom; ref_q[i] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int n = 0; n < 1000; n++) begin
      logic [7:0] a;
      a = 8'($urandom);
      if (n % 50 == 7) begin
        we = 1; waddr = a; wdata = $urandom; ref_q[a] = wdata;
        @(negedge clk);
        we = 0;
      end
      raddr = a;
      @(negedge clk);
      raddr = a + 8'd1;     // the output must still show the word at a
      checks++;
      if (rdata !== ref_q[a]) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d got %h want %h", a, rdata, ref_q[a]);
      end
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
