// instr_decode: decoder of the 32-bit instruction word.
//
// Splits the word into its fields (see egpu_pkg for the format), classifies the
// instruction for the pipeline control (control / operation / load / save) and
// derives the datapath controls: which unit produces the result (logic ALU or
// multiplier/shifter), its operation, where operand B comes from (register,
// immediate or thread index) and whether rd is written. Unknown opcodes decode
// as NOP. Purely combinational; in the fetch unit its output is registered into
// the decode stage register. The instruction set is only described as a
// PTX-like subset in the published design, so the set and format are this
// design's.
module instr_decode
  import egpu_pkg::*;
(
  input  logic [31:0] instr,
  output dec_t        dec
);
  opcode_e opc;

  always_comb begin
    opc          = opcode_e'(instr[31:26]);
    dec          = '0;
    dec.opc      = opc;
    dec.rd       = instr[25:21];
    dec.ra       = instr[20:16];
    dec.rb       = instr[15:11];
    dec.scale    = instr[10:8];
    dec.imm      = instr[15:0];
    dec.kind     = K_OP;
    dec.wr_rd    = 1'b1;
    dec.aop      = A_PASSA;
    dec.mop      = M_LO_U;
    unique case (opc)
      OP_ADD:     dec.aop = A_ADD;
      OP_SUB:     dec.aop = A_SUB;
      OP_AND:     dec.aop = A_AND;
      OP_OR:      dec.aop = A_OR;
      OP_XOR:     dec.aop = A_XOR;
      OP_NOT:     dec.aop = A_NOT;
      OP_CNOT:    dec.aop = A_CNOT;
      OP_ABS:     dec.aop = A_ABS;
      OP_MOV:     dec.aop = A_PASSA;
      OP_LDI:     begin dec.aop = A_PASSB; dec.bsel_imm = 1'b1; dec.scale = 3'd0; end
      OP_TID:     begin dec.aop = A_PASSB; dec.bsel_tid = 1'b1; end
      OP_MULLO_U: begin dec.use_mul = 1'b1; dec.mop = M_LO_U; end
      OP_MULLO_S: begin dec.use_mul = 1'b1; dec.mop = M_LO_S; end
      OP_MULHI_U: begin dec.use_mul = 1'b1; dec.mop = M_HI_U; end
      OP_MULHI_S: begin dec.use_mul = 1'b1; dec.mop = M_HI_S; end
      OP_SHL:     begin dec.use_mul = 1'b1; dec.mop = M_LSL; end
      OP_SHR:     begin dec.use_mul = 1'b1; dec.mop = M_LSR; end
      OP_SAR:     begin dec.use_mul = 1'b1; dec.mop = M_ASR; end
      OP_LOD:     dec.kind = K_LOAD;
      OP_STO:     begin dec.kind = K_SAVE; dec.wr_rd = 1'b0; end
      OP_BRA, OP_CALL, OP_RET, OP_LOOP, OP_ENDL, OP_STOP:
                  begin dec.kind = K_CTRL; dec.wr_rd = 1'b0; end
      default:    begin dec.opc = OP_NOP; dec.kind = K_CTRL; dec.wr_rd = 1'b0; end
    endcase
  end
endmodule
