// fp_arith_unit_tb: self-checking test of the floating-point arithmetic unit.
//
// Issues random operations of all kinds (FMUL, FADD, FSUB, FDIV, FSQRT, DOT4)
// with distinct pipe depths. Like the PE's issue logic, the testbench only
// issues an operation when its write-back cycle is free. Every write-back is
// checked against a double-precision reference: value, destination register
// and the cycle it was due in. It also counts that each pipe was used.
module fp_arith_unit_tb;
  import fp_pkg::*;
  import pe_pkg::*;
  import tb_fp_pkg::*;
  localparam int MS = 3, AS = 2, DS = 5, SS = 6;
  localparam int N  = 3000;

  logic      clk = 0, rst_n = 0;
  fp_issue_t issue;
  logic      wb_valid;
  reg_t      wb_rd;
  word_t     wb_data;

  fp_arith_unit #(.MUL_STAGES(MS), .ADD_STAGES(AS), .DIV_STAGES(DS), .SQRT_STAGES(SS)) dut (.*);

  always #5 clk = ~clk;

  int     checks = 0, failures = 0;
  int     per_unit[6];
  longint cyc = 0;
  typedef struct { fp64_t v; reg_t rd; } exp_t;
  exp_t   due[longint];

  always @(posedge clk) cyc <= cyc + 1;

  function automatic fp64_t model(fp_issue_t x);
    real p0, p1, p2, p3;
    unique case (x.unit)
      U_MUL:  return r2b(b2r(x.opa[0]) * b2r(x.opb[0]));
      U_ADD:  return x.sub ? r2b(b2r(x.opa[0]) - b2r(x.opb[0])) : r2b(b2r(x.opa[0]) + b2r(x.opb[0]));
      U_DIV:  return r2b(b2r(x.opa[0]) / b2r(x.opb[0]));
      U_SQRT: return r2b($sqrt(b2r(x.opa[0])));
      default: begin
        p0 = b2r(x.opa[0]) * b2r(x.opb[0]);
        p1 = b2r(x.opa[1]) * b2r(x.opb[1]);
        p2 = b2r(x.opa[2]) * b2r(x.opb[2]);
        p3 = b2r(x.opa[3]) * b2r(x.opb[3]);
        return r2b((p0 + p1) + (p2 + p3));
      end
    endcase
  endfunction

  function automatic int lat_of(unit_e u);
    unique case (u)
      U_MUL:  return MS;
      U_ADD:  return AS;
      U_DIV:  return DS;
      U_SQRT: return SS;
      default: return MS + 2 * AS;
    endcase
  endfunction

  task automatic check_out();
    if (due.exists(cyc)) begin
      checks++;
      if (!wb_valid || wb_rd !== due[cyc].rd || wb_data !== due[cyc].v) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d: got v=%0b rd=%0d %h want rd=%0d %h", cyc, wb_valid, wb_rd, wb_data, due[cyc].rd, due[cyc].v);
      end
      due.delete(cyc);
    end else if (wb_valid) begin
      checks++;
      failures++;
      $display("FAIL unexpected write-back at cycle %0d", cyc);
    end
  endtask

  initial begin
    int     sent;
    unit_e  u;
    longint t;
    sent  = 0;
    issue = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (sent < N || due.size() != 0) begin
      @(negedge clk);
      check_out();
      issue = '0;
      if (sent < N) begin
        u = unit_e'(1 + $urandom_range(4));
        t = cyc + longint'(lat_of(u));
        if (!due.exists(t)) begin
          issue.valid = 1;
          issue.unit  = u;
          issue.sub   = 1'($urandom_range(1));
          issue.rd    = reg_t'($urandom);
          for (int i = 0; i < 4; i++) begin issue.opa[i] = rand_fp(40); issue.opb[i] = rand_fp(40); end
          if (u == U_SQRT) issue.opa[0][63] = 1'b0;
          due[t] = '{model(issue), issue.rd};
          per_unit[u]++;
          sent++;
        end
      end
    end
    for (int i = 1; i <= 5; i++) begin
      checks++;
      if (per_unit[i] == 0) begin failures++; $display("FAIL unit %0d never used", i); end
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
