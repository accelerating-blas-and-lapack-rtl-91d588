// fsqrt_tb: self-checking test of the FSQRT pipeline.
//
// Streams one square root per cycle for most of the run (with random idle
// cycles), each tagged with a counter, and checks every result bit-exactly
// against the simulator's double-precision square root, its tag, and that it
// appears exactly STAGES cycles after it was accepted. A few special operands
// (zero, infinity, NaN, overflow, underflow) are mixed in.
module fsqrt_tb;
  import fp_pkg::*;
  import tb_fp_pkg::*;
  localparam int ST = 3;
  localparam int N  = 3000;

  logic       clk = 0, rst_n = 0;
  logic       in_valid = 0;
  fp64_t      a = 0;
  logic [4:0] tag_in = 0;
  logic       out_valid;
  fp64_t      result;
  logic [4:0] tag_out;

  fsqrt #(.STAGES(ST)) dut (.*);

  always #5 clk = ~clk;

  int     checks = 0, failures = 0;
  longint cyc = 0;
  typedef struct { fp64_t exp_v; logic [4:0] tag; longint t; } exp_t;
  exp_t q[$];

  always @(posedge clk) cyc <= cyc + 1;

  function automatic fp64_t model(fp64_t x);
    fp64_t r;
    r = r2b($sqrt(b2r(x)));
    if (r[62:52] == 11'h7FF && r[51:0] != 0) r = QNAN;
    if (r[62:52] == 0) r = {r[63], 63'd0};
    return r;
  endfunction

  task automatic check_out();
    exp_t e;
    if (!out_valid) return;
    checks++;
    if (q.size() == 0) begin failures++; $display("FAIL unexpected output"); return; end
    e = q.pop_front();
    if (result !== e.exp_v || tag_out !== e.tag || cyc - e.t != longint'(ST)) begin
      failures++;
      if (failures < 10) $display("FAIL got %h tag %0d lat %0d, want %h tag %0d", result, tag_out, cyc - e.t, e.exp_v, e.tag);
    end
  endtask

  fp64_t specials[8] = '{64'h0, 64'h8000_0000_0000_0000, 64'h7FF0_0000_0000_0000, 64'hFFF0_0000_0000_0000,
                         64'h7FF8_0000_0000_0001, 64'h3FF0_0000_0000_0000, 64'h7FE0_0000_0000_0000, 64'h0010_0000_0000_0000};

  initial begin
    int sent;
    sent = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (sent < N || q.size() != 0) begin
      @(negedge clk);
      check_out();
      in_valid = 0;
      if (sent < N && $urandom_range(9) != 0) begin
        if (sent < 16) a = specials[sent % 8] ^ {sent[3], 63'd0};
        else begin a = rand_fp(1000); a[63] = ($urandom_range(15) == 0); end
        in_valid = 1;
        tag_in   = 5'(sent);
        q.push_back('{model(a), 5'(sent), cyc});
        sent++;
      end
    end
    @(negedge clk);
    check_out();
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
