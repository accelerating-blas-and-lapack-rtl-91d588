// pe_decoder_tb: self-checking test of the PE instruction decoder.
//
// Decodes every opcode with random register fields and compares all decoded
// fields with a table of what each instruction must produce.
module pe_decoder_tb;
  import pe_pkg::*;
  logic [31:0] instr = 0;
  pe_dec_t     dec;
  int          checks = 0, failures = 0;

  pe_decoder dut (.*);

  initial begin
    for (int n = 0; n < 800; n++) begin
      logic [3:0] op;
      pe_dec_t    e;
      op    = 4'(n % 16);
      instr = {op, 28'($urandom)};
      e         = '0;
      e.rd      = instr[27:23];
      e.rs1     = instr[22:18];
      e.rs2     = instr[17:13];
      e.unit    = U_NONE;
      case (op)
        4'd1:  begin e.unit = U_ADD;  e.use_rs2 = 1; end
        4'd2:  begin e.unit = U_ADD;  e.use_rs2 = 1; e.sub = 1; end
        4'd3:  begin e.unit = U_MUL;  e.use_rs2 = 1; end
        4'd4:  begin e.unit = U_DIV;  e.use_rs2 = 1; end
        4'd5:  e.unit = U_SQRT;
        4'd6:  begin e.unit = U_DOT4; e.use_rs2 = 1; end
        4'd15: e.halt = 1;
        4'd0:  ;
        default: e.illegal = 1;
      endcase
      #1;
      checks++;
      if (dec !== e) begin
        failures++;
        if (failures < 10) $display("FAIL instr %h got %p want %p", instr, dec, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
