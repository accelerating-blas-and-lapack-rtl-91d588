// dot4_tb: self-checking test of the DOT4 datapath.
//
// Streams random 4-element vector pairs, one per cycle with random gaps, and
// checks each result bit-exactly against (a0*b0 + a1*b1) + (a2*b2 + a3*b3)
// evaluated in the simulator's double precision in the same order, the tag,
// and the latency MUL_STAGES + 2*ADD_STAGES.
module dot4_tb;
  import fp_pkg::*;
  import tb_fp_pkg::*;
  localparam int MS = 3, AS = 2, LAT = MS + 2 * AS;
  localparam int N  = 2000;

  logic             clk = 0, rst_n = 0;
  logic             in_valid = 0;
  logic [3:0][63:0] a = '0, b = '0;
  logic [4:0]       tag_in = 0;
  logic             out_valid;
  fp64_t            result;
  logic [4:0]       tag_out;

  dot4 #(.MUL_STAGES(MS), .ADD_STAGES(AS)) dut (.*);

  always #5 clk = ~clk;

  int     checks = 0, failures = 0;
  longint cyc = 0;
  typedef struct { fp64_t exp_v; logic [4:0] tag; longint t; } exp_t;
  exp_t q[$];

  always @(posedge clk) cyc <= cyc + 1;

  function automatic fp64_t model(logic [3:0][63:0] x, logic [3:0][63:0] y);
    real p0, p1, p2, p3;
    p0 = b2r(x[0]) * b2r(y[0]);
    p1 = b2r(x[1]) * b2r(y[1]);
    p2 = b2r(x[2]) * b2r(y[2]);
    p3 = b2r(x[3]) * b2r(y[3]);
    return r2b((p0 + p1) + (p2 + p3));
  endfunction

  task automatic check_out();
    exp_t e;
    if (!out_valid) return;
    checks++;
    if (q.size() == 0) begin failures++; $display("FAIL unexpected output"); return; end
    e = q.pop_front();
    if (result !== e.exp_v || tag_out !== e.tag || cyc - e.t != longint'(LAT)) begin
      failures++;
      if (failures < 10) $display("FAIL got %h tag %0d lat %0d, want %h tag %0d", result, tag_out, cyc - e.t, e.exp_v, e.tag);
    end
  endtask

  initial begin
    int sent;
    sent = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (sent < N || q.size() != 0) begin
      @(negedge clk);
      check_out();
      in_valid = 0;
      if (sent < N && $urandom_range(7) != 0) begin
        for (int i = 0; i < 4; i++) begin a[i] = rand_fp(30); b[i] = rand_fp(30); end
        in_valid = 1;
        tag_in   = 5'(sent);
        q.push_back('{model(a, b), 5'(sent), cyc});
        sent++;
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
