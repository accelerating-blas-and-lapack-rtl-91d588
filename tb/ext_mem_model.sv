// ext_mem_model: behavioural model of the memory hierarchy above the APE,
// for testbenches only.
//
// DEPTH double words. A request (req, we, addr, wdata) is granted in a random
// cycle (gnt high with req); a granted write stores at once, a granted read
// returns its word with rvalid between MIN_LAT and MAX_LAT cycles later, in
// request order. The array mem is written and read directly by testbenches.
// Counts granted reads and writes, and cycles a request waited for a grant.
module ext_mem_model #(
  parameter int DEPTH   = 4096,
  parameter int MIN_LAT = 1,
  parameter int MAX_LAT = 4,
  parameter int GNT_PCT = 60
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req,
  input  logic        we,
  input  logic [31:0] addr,
  input  logic [63:0] wdata,
  output logic        gnt,
  output logic        rvalid,
  output logic [63:0] rdata
);
  logic [63:0] mem [DEPTH];
  int          n_reads = 0, n_writes = 0, n_waits = 0;
  typedef struct { longint due; logic [63:0] d; } rsp_t;
  rsp_t        rq[$];
  longint      cyc = 0;

  initial begin
    gnt = 0; rvalid = 0; rdata = '0;
  end

  always @(negedge clk) begin
    gnt = rst_n && req && ($urandom_range(99) < GNT_PCT);
    if (req && !gnt) n_waits++;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (req && gnt) begin
      if (we) begin
        mem[addr % DEPTH] <= wdata;
        n_writes++;
      end else begin
        longint t;
        t = cyc + longint'($urandom_range(MAX_LAT - MIN_LAT)) + longint'(MIN_LAT);
        if (rq.size() != 0 && rq[$].due >= t) t = rq[$].due + 1;
        rq.push_back('{t, mem[addr % DEPTH]});
        n_reads++;
      end
    end
    rvalid <= 1'b0;
    if (rq.size() != 0 && rq[0].due <= cyc) begin
      rvalid <= 1'b1;
      rdata  <= rq[0].d;
      void'(rq.pop_front());
    end
  end
endmodule
