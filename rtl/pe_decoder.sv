// pe_decoder: the PE's instruction decoder.
//
// Purely combinational. Splits a 32-bit PE instruction
// ([31:28] opcode, [27:23] rd, [22:18] rs1, [17:13] rs2) into the pipe that
// executes it, the register numbers and flags for subtract, "reads rs2" and
// HALT. Unknown opcodes are flagged illegal and decode as NOP. The source
// names a decoder between the instruction memory and the arithmetic units and
// a DOT4 instruction; the encoding is this implementation's own (pe_pkg).
module pe_decoder
  import pe_pkg::*;
(
  input  logic [31:0] instr,
  output pe_dec_t     dec
);
  always_comb begin
    dec         = '0;
    dec.unit    = U_NONE;
    dec.rd      = instr[27:23];
    dec.rs1     = instr[22:18];
    dec.rs2     = instr[17:13];
    dec.use_rs2 = 1'b1;
    unique case (instr[31:28])
      OP_NOP:   dec.use_rs2 = 1'b0;
      OP_FADD:  dec.unit = U_ADD;
      OP_FSUB:  begin dec.unit = U_ADD; dec.sub = 1'b1; end
      OP_FMUL:  dec.unit = U_MUL;
      OP_FDIV:  dec.unit = U_DIV;
      OP_FSQRT: begin dec.unit = U_SQRT; dec.use_rs2 = 1'b0; end
      OP_DOT4:  dec.unit = U_DOT4;
      OP_HALT:  begin dec.halt = 1'b1; dec.use_rs2 = 1'b0; end
      default:  begin dec.illegal = 1'b1; dec.use_rs2 = 1'b0; end
    endcase
  end
endmodule
