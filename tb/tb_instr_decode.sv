// tb_instr_decode: every opcode with random fields; checks class, unit,
// operation, operand source, write enable and field extraction against a
// table written out here.
module tb_instr_decode;
  import egpu_pkg::*;
  logic [31:0] instr;
  dec_t dec;
  instr_decode dut (.instr, .dec);
  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_dec(input string nm, input kind_e k, input bit um, input int aop, input int mop,
                            input bit bi, input bit bt, input bit wr);
    checks++;
    if (dec.kind !== k || dec.use_mul !== um || (!um && k == K_OP && int'(dec.aop) != aop) ||
        (um && int'(dec.mop) != mop) || dec.bsel_imm !== bi || dec.bsel_tid !== bt || dec.wr_rd !== wr ||
        dec.rd !== instr[25:21] || dec.ra !== instr[20:16] || dec.rb !== instr[15:11] || dec.imm !== instr[15:0]) begin
      failures++;
      $display("FAIL %s", nm);
    end
  endtask

  initial begin
    for (int rep = 0; rep < 50; rep++) begin
      for (int o = 0; o < 64; o++) begin
        instr = {6'(o), 26'($urandom)};
        #1;
        case (o)
          1:  expect_dec("ADD", K_OP, 0, A_ADD, 0, 0, 0, 1);
          2:  expect_dec("SUB", K_OP, 0, A_SUB, 0, 0, 0, 1);
          3:  expect_dec("AND", K_OP, 0, A_AND, 0, 0, 0, 1);
          4:  expect_dec("OR", K_OP, 0, A_OR, 0, 0, 0, 1);
          5:  expect_dec("XOR", K_OP, 0, A_XOR, 0, 0, 0, 1);
          6:  expect_dec("NOT", K_OP, 0, A_NOT, 0, 0, 0, 1);
          7:  expect_dec("CNOT", K_OP, 0, A_CNOT, 0, 0, 0, 1);
          8:  expect_dec("ABS", K_OP, 0, A_ABS, 0, 0, 0, 1);
          9:  expect_dec("MOV", K_OP, 0, A_PASSA, 0, 0, 0, 1);
          10: expect_dec("LDI", K_OP, 0, A_PASSB, 0, 1, 0, 1);
          11: expect_dec("TID", K_OP, 0, A_PASSB, 0, 0, 1, 1);
          12: expect_dec("MULLO_U", K_OP, 1, 0, M_LO_U, 0, 0, 1);
          13: expect_dec("MULLO_S", K_OP, 1, 0, M_LO_S, 0, 0, 1);
          14: expect_dec("MULHI_U", K_OP, 1, 0, M_HI_U, 0, 0, 1);
          15: expect_dec("MULHI_S", K_OP, 1, 0, M_HI_S, 0, 0, 1);
          16: expect_dec("SHL", K_OP, 1, 0, M_LSL, 0, 0, 1);
          17: expect_dec("SHR", K_OP, 1, 0, M_LSR, 0, 0, 1);
          18: expect_dec("SAR", K_OP, 1, 0, M_ASR, 0, 0, 1);
          19: expect_dec("LOD", K_LOAD, 0, 0, 0, 0, 0, 1);
          20: expect_dec("STO", K_SAVE, 0, 0, 0, 0, 0, 0);
          21, 22, 23, 24, 25, 26: expect_dec("CTRL", K_CTRL, 0, 0, 0, 0, 0, 0);
          default: begin
            expect_dec("NOP", K_CTRL, 0, 0, 0, 0, 0, 0);
            checks++;
            if (dec.opc !== OP_NOP) failures++;
          end
        endcase
        checks++;
        if (o == 10 ? dec.scale !== 3'd0 : dec.scale !== instr[10:8]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
