// ape_local_ctrl: decoder and sequencer of the APE's local program.
//
// Runs the program in the local instruction memory from start_pc until END,
// then pulses done. It moves words between the local memory (LM, port B) and
// the PE's register file and starts the PE:
//   LDRF r, a  - r = LM[a]: LM read in one cycle, register write in the next
//                (2 cycles per word)
//   STRF r, a  - LM[a] = r: register read and LM write in one cycle
//   RUNPE pc   - pulse pe_start with pe_pc = pc and wait for pe_done
//   END        - pulse done and stop; NOP and unknown opcodes do nothing.
// Fetch works like the PE's: the synchronous instruction memory is addressed
// with the next pc so the current instruction is always on its output.
// That loads, stores and the PE run are ordered in one program follows the
// source's five-step operation; the instruction set and timing are this
// implementation's own.
module ape_local_ctrl
  import pe_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  pc_t         start_pc,
  output logic        done,
  output logic        busy,
  // local instruction memory
  output pc_t         imem_raddr,
  input  logic [31:0] imem_rdata,
  // LM port B
  output logic        lm_en,
  output logic        lm_we,
  output lm_addr_t    lm_addr,
  output word_t       lm_wdata,
  input  word_t       lm_rdata,
  // PE register file
  output logic        rf_we,
  output reg_t        rf_waddr,
  output word_t       rf_wdata,
  output reg_t        rf_raddr,
  input  word_t       rf_rdata,
  // PE control
  output logic        pe_start,
  output pc_t         pe_pc,
  input  logic        pe_done
);
  typedef enum logic [1:0] {S_IDLE, S_EXEC, S_LDWB, S_PEWAIT} state_e;

  state_e   state_q, state_d;
  pc_t      pc_q;
  logic     advance;
  loc_op_e  op;
  reg_t     r;
  lm_addr_t a;

  assign op = loc_op_e'(imem_rdata[31:28]);
  assign r  = imem_rdata[27:23];
  assign a  = imem_rdata[LM_AW-1:0];

  always_comb begin
    state_d  = state_q;
    advance  = 1'b0;
    done     = 1'b0;
    lm_en    = 1'b0;
    lm_we    = 1'b0;
    lm_addr  = a;
    lm_wdata = rf_rdata;
    rf_we    = 1'b0;
    rf_waddr = r;
    rf_wdata = lm_rdata;
    rf_raddr = r;
    pe_start = 1'b0;
    pe_pc    = imem_rdata[PCW-1:0];
    unique case (state_q)
      S_IDLE: if (start) state_d = S_EXEC;
      S_EXEC: begin
        unique case (op)
          L_LDRF: begin
            lm_en   = 1'b1;
            state_d = S_LDWB;
          end
          L_STRF: begin
            lm_en   = 1'b1;
            lm_we   = 1'b1;
            advance = 1'b1;
          end
          L_RUNPE: begin
            pe_start = 1'b1;
            state_d  = S_PEWAIT;
          end
          L_END: begin
            done    = 1'b1;
            state_d = S_IDLE;
          end
          default: advance = 1'b1;
        endcase
      end
      S_LDWB: begin
        rf_we   = 1'b1;
        advance = 1'b1;
        state_d = S_EXEC;
      end
      S_PEWAIT: if (pe_done) begin
        advance = 1'b1;
        state_d = S_EXEC;
      end
      default: state_d = S_IDLE;
    endcase
  end

  always_comb begin
    if (state_q == S_IDLE) imem_raddr = start_pc;
    else if (advance)      imem_raddr = pc_q + 1'b1;
    else                   imem_raddr = pc_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      pc_q    <= '0;
    end else begin
      state_q <= state_d;
      pc_q    <= imem_raddr;
    end
  end

  assign busy = (state_q != S_IDLE);
endmodule
