// logic_alu: soft-logic integer ALU of a scalar processor.
//
// Bitwise functions (AND, OR, XOR, NOT, CNOT), the adder group (ADD, SUB, ABS)
// and two pass-through operations (PASSA for register moves, PASSB for
// immediates and thread indices). The adder is a two-stage pipelined 32-bit
// adder: the low 16 bits and their carry are formed in one stage, the high 16
// bits in the next. SUB and ABS reuse it with inverted operands and a carry-in.
//
// Timing: a, b and op are sampled every clock; y is valid LATENCY clocks later.
// LATENCY defaults to 7 so that the ALU is depth-matched to int_mul_shift and all
// results of an SP are written back at the same point. The pipelined adder and
// the depth matching follow the published design; the exact operation list and
// CNOT meaning (1 when the operand is zero, as in PTX) are this design's.
module logic_alu
  import egpu_pkg::*;
#(
  parameter int LATENCY = 7
) (
  input  logic        clk,
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  alu_op_e     op,
  output logic [31:0] y
);
  // stage 1: input registers
  logic [31:0] a1, b1;
  alu_op_e     op1;
  always_ff @(posedge clk) begin
    a1  <= a;
    b1  <= b;
    op1 <= op;
  end

  // stage 2: bitwise result, adder low half
  logic [31:0] x, z, lg;
  logic        cin;
  always_comb begin
    x   = (op1 == A_ABS && a1[31]) ? ~a1 : a1;
    z   = (op1 == A_SUB) ? ~b1 : (op1 == A_ABS) ? 32'd0 : b1;
    cin = (op1 == A_SUB) || (op1 == A_ABS && a1[31]);
    unique case (op1)
      A_AND:   lg = a1 & b1;
      A_OR:    lg = a1 | b1;
      A_XOR:   lg = a1 ^ b1;
      A_NOT:   lg = ~a1;
      A_CNOT:  lg = {31'd0, (a1 == 32'd0)};
      A_PASSA: lg = a1;
      default: lg = b1;
    endcase
  end

  logic [16:0] lo2;
  logic [15:0] xh2, zh2;
  logic [31:0] lg2;
  logic        is_add2;
  always_ff @(posedge clk) begin
    lo2     <= {1'b0, x[15:0]} + {1'b0, z[15:0]} + 17'(cin);
    xh2     <= x[31:16];
    zh2     <= z[31:16];
    lg2     <= lg;
    is_add2 <= (op1 == A_ADD) || (op1 == A_SUB) || (op1 == A_ABS);
  end

  // stage 3: adder high half and result select
  logic [31:0] r3;
  always_ff @(posedge clk) begin
    r3 <= is_add2 ? {xh2 + zh2 + 16'(lo2[16]), lo2[15:0]} : lg2;
  end

  // remaining stages: delay to match the multiplier datapath
  localparam int NDLY = LATENCY - 3;
  logic [31:0] dly [NDLY+1];
  assign dly[0] = r3;
  for (genvar i = 0; i < NDLY; i++) begin : g_dly
    always_ff @(posedge clk) dly[i+1] <= dly[i];
  end
  assign y = dly[NDLY];

endmodule
