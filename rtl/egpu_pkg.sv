// egpu_pkg: types and constants shared by the SIMT processor.
//
// The processor is one streaming multiprocessor of NSP = 16 scalar processors
// (SPs) that run all threads of a program in lockstep: every thread of an
// instruction is issued before the next instruction starts. Threads are laid
// out as a block NSP wide (one thread per SP per row) and num_threads/NSP rows
// deep.
//
// The 16 SPs, the 4-read/1-write shared memory and the 32-bit integer datapath
// follow the published architecture. The instruction set is only described as a
// PTX-like subset of 61 instructions, so the opcodes, the 32-bit instruction
// format and the dynamic-thread-scale encoding below are this design's own:
//
//   [31:26] opcode   [25:21] rd   [20:16] ra   [15:11] rb   [10:8] scale
//   [15:0]  imm16 (LDI value, LOD/STO offset in [7:0], branch target, loop count)
//
//   scale[1:0] : active SPs 0 -> 16, 1 -> 8, 2 -> 4, 3 -> 1
//   scale[2]   : 1 -> only the first row of threads
package egpu_pkg;

  localparam int NSP   = 16;  // scalar processors per SM
  localparam int NRD   = 4;   // shared memory read ports
  localparam int XLEN  = 32;  // data path width
  localparam int ROWW  = 8;   // row index width: up to 256 rows = 4096 threads
  localparam int PCW   = 10;  // program counter width

  typedef enum logic [5:0] {
    OP_NOP     = 6'd0,
    OP_ADD     = 6'd1,   // rd = ra + rb
    OP_SUB     = 6'd2,   // rd = ra - rb
    OP_AND     = 6'd3,
    OP_OR      = 6'd4,
    OP_XOR     = 6'd5,
    OP_NOT     = 6'd6,   // rd = ~ra
    OP_CNOT    = 6'd7,   // rd = (ra == 0)
    OP_ABS     = 6'd8,   // rd = |ra|
    OP_MOV     = 6'd9,   // rd = ra
    OP_LDI     = 6'd10,  // rd = sign-extended imm16
    OP_TID     = 6'd11,  // rd = thread index (row*NSP + SP)
    OP_MULLO_U = 6'd12,  // rd = low 32 bits of unsigned ra*rb
    OP_MULLO_S = 6'd13,
    OP_MULHI_U = 6'd14,  // rd = high 32 bits of unsigned ra*rb
    OP_MULHI_S = 6'd15,
    OP_SHL     = 6'd16,  // rd = ra << rb
    OP_SHR     = 6'd17,  // rd = ra >> rb (logical)
    OP_SAR     = 6'd18,  // rd = ra >>> rb (arithmetic)
    OP_LOD     = 6'd19,  // rd = smem[ra + imm16[7:0]]
    OP_STO     = 6'd20,  // smem[ra + imm16[7:0]] = rb
    OP_BRA     = 6'd21,  // pc = imm16
    OP_CALL    = 6'd22,  // push pc+1, pc = imm16
    OP_RET     = 6'd23,  // pc = pop
    OP_LOOP    = 6'd24,  // loop counter = imm16
    OP_ENDL    = 6'd25,  // if (--counter != 0) pc = imm16
    OP_STOP    = 6'd26   // end of program
  } opcode_e;

  // Instruction class as seen by the pipeline control.
  typedef enum logic [1:0] {
    K_CTRL = 2'd0,  // control flow / NOP: one clock, issues no threads
    K_OP   = 2'd1,  // operation: one row per clock
    K_LOAD = 2'd2,  // load: NSP/NRD clocks per row
    K_SAVE = 2'd3   // save: NSP clocks per row (one write port)
  } kind_e;

  typedef enum logic [3:0] {
    A_AND, A_OR, A_XOR, A_NOT, A_CNOT, A_ADD, A_SUB, A_ABS, A_PASSA, A_PASSB
  } alu_op_e;

  typedef enum logic [2:0] {
    M_LO_U, M_LO_S, M_HI_U, M_HI_S, M_LSL, M_LSR, M_ASR
  } mul_op_e;

  // Decoded instruction.
  typedef struct packed {
    opcode_e     opc;
    kind_e       kind;
    logic [4:0]  rd;
    logic [4:0]  ra;
    logic [4:0]  rb;
    logic [2:0]  scale;
    logic [15:0] imm;
    logic        use_mul;   // result from the multiplier/shifter
    alu_op_e     aop;
    mul_op_e     mop;
    logic        bsel_imm;  // operand B is the sign-extended immediate
    logic        bsel_tid;  // operand B is the thread index
    logic        wr_rd;     // writes register rd
  } dec_t;

  // One issued slot: one row of threads (and, for loads/stores, one width
  // position) of the current instruction, as sent down the control delay chain.
  typedef struct packed {
    logic            valid;
    kind_e           kind;
    logic [4:0]      rd;
    logic [4:0]      ra;
    logic [4:0]      rb;
    logic [15:0]     imm;
    logic            use_mul;
    alu_op_e         aop;
    mul_op_e         mop;
    logic            bsel_imm;
    logic            bsel_tid;
    logic            wr_rd;
    logic [ROWW-1:0] row;
    logic [3:0]      wid;       // load: read group, save: SP index
    logic [NSP-1:0]  lane_mask; // SPs taking part (dynamic width)
  } issue_t;

  function automatic logic [31:0] make_instr(opcode_e opc, logic [4:0] rd, logic [4:0] ra,
                                             logic [4:0] rb, logic [2:0] scale,
                                             logic [7:0] off = 8'h00);
    return {opc, rd, ra, rb, scale, off};
  endfunction

  function automatic logic [31:0] make_imm(opcode_e opc, logic [4:0] rd, logic [4:0] ra,
                                           logic [15:0] imm);
    return {opc, rd, ra, imm};
  endfunction

endpackage
