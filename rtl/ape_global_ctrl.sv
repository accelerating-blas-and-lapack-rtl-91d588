// ape_global_ctrl: decoder and sequencer of the APE's global program.
//
// Runs the program in the global instruction memory from address 0 until
// HALT, then pulses done. It moves blocks of double words between the memory
// hierarchy (ext_* port) and the local memory (LM, port A) and starts the
// local program:
//   LDLM lm, n, x  - LM[lm+k] = EXT[x+k] for k < n
//   STLM lm, n, x  - EXT[x+k] = LM[lm+k] for k < n
//   RUNLOCAL pc    - pulse local_start with local_pc = pc, wait for local_done
//   HALT           - pulse done and stop; NOP and unknown opcodes do nothing.
// Memory-hierarchy port: a request (ext_req with ext_we, ext_addr,
// ext_wdata) is held until ext_gnt is high in the same cycle; read data come
// back later with ext_rvalid, in order. This controller keeps one request
// outstanding: a read takes the grant wait plus the read latency, a write
// takes one LM read cycle plus the grant wait. The block transfer between
// the memory hierarchy and the LM follows the source; the instruction set,
// the port protocol and this timing are this implementation's choices.
module ape_global_ctrl
  import pe_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              done,
  output logic              busy,
  // global instruction memory
  output pc_t               imem_raddr,
  input  logic [63:0]       imem_rdata,
  // LM port A
  output logic              lm_en,
  output logic              lm_we,
  output lm_addr_t          lm_addr,
  output word_t             lm_wdata,
  input  word_t             lm_rdata,
  // memory hierarchy
  output logic              ext_req,
  output logic              ext_we,
  output logic [EXT_AW-1:0] ext_addr,
  output word_t             ext_wdata,
  input  logic              ext_gnt,
  input  logic              ext_rvalid,
  input  word_t             ext_rdata,
  // local program control
  output logic              local_start,
  output pc_t               local_pc,
  input  logic              local_done
);
  typedef enum logic [2:0] {S_IDLE, S_EXEC, S_RDREQ, S_RDWAIT, S_LMRD, S_WRREQ, S_LOCWAIT} state_e;

  state_e             state_q, state_d;
  pc_t                pc_q;
  logic [CNT_W-1:0]   k_q, k_d;
  logic               advance;
  glb_op_e            op;
  lm_addr_t           lm_base;
  logic [CNT_W-1:0]   cnt;
  logic [EXT_AW-1:0]  ext_base;

  assign op       = glb_op_e'(imem_rdata[63:60]);
  assign lm_base  = imem_rdata[59:49];
  assign cnt      = imem_rdata[48:37];
  assign ext_base = imem_rdata[EXT_AW-1:0];

  always_comb begin
    state_d     = state_q;
    k_d         = k_q;
    advance     = 1'b0;
    done        = 1'b0;
    lm_en       = 1'b0;
    lm_we       = 1'b0;
    lm_addr     = lm_base + LM_AW'(k_q);
    lm_wdata    = ext_rdata;
    ext_req     = 1'b0;
    ext_we      = 1'b0;
    ext_addr    = ext_base + EXT_AW'(k_q);
    ext_wdata   = lm_rdata;
    local_start = 1'b0;
    local_pc    = imem_rdata[PCW-1:0];
    unique case (state_q)
      S_IDLE: if (start) state_d = S_EXEC;
      S_EXEC: begin
        k_d = '0;
        unique case (op)
          G_LDLM:     if (cnt == '0) advance = 1'b1; else state_d = S_RDREQ;
          G_STLM:     if (cnt == '0) advance = 1'b1; else state_d = S_LMRD;
          G_RUNLOCAL: begin
            local_start = 1'b1;
            state_d     = S_LOCWAIT;
          end
          G_HALT: begin
            done    = 1'b1;
            state_d = S_IDLE;
          end
          default: advance = 1'b1;
        endcase
      end
      S_RDREQ: begin
        ext_req = 1'b1;
        if (ext_gnt) state_d = S_RDWAIT;
      end
      S_RDWAIT: if (ext_rvalid) begin
        lm_en = 1'b1;
        lm_we = 1'b1;
        k_d   = k_q + 1'b1;
        if (k_q + 1'b1 == cnt) begin
          advance = 1'b1;
          state_d = S_EXEC;
        end else begin
          state_d = S_RDREQ;
        end
      end
      S_LMRD: begin
        lm_en   = 1'b1;
        state_d = S_WRREQ;
      end
      S_WRREQ: begin
        ext_req = 1'b1;
        ext_we  = 1'b1;
        if (ext_gnt) begin
          k_d = k_q + 1'b1;
          if (k_q + 1'b1 == cnt) begin
            advance = 1'b1;
            state_d = S_EXEC;
          end else begin
            state_d = S_LMRD;
          end
        end
      end
      S_LOCWAIT: if (local_done) begin
        advance = 1'b1;
        state_d = S_EXEC;
      end
      default: state_d = S_IDLE;
    endcase
  end

  always_comb begin
    if (state_q == S_IDLE) imem_raddr = '0;
    else if (advance)      imem_raddr = pc_q + 1'b1;
    else                   imem_raddr = pc_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      pc_q    <= '0;
      k_q     <= '0;
    end else begin
      state_q <= state_d;
      pc_q    <= imem_raddr;
      k_q     <= k_d;
    end
  end

  assign busy = (state_q != S_IDLE);

  // a request stays up, unchanged, until it is granted
  a_req_hold: assert property (@(posedge clk) disable iff (!rst_n)
      ext_req && !ext_gnt |=> ext_req && $stable(ext_we) && $stable(ext_addr))
    else $error("ape_global_ctrl: request dropped or changed before grant");
endmodule
