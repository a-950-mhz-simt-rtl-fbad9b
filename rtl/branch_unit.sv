// branch_unit: control-flow decisions of the fetch unit.
//
// Looks at the decoded instruction in the decode stage register when it
// executes (fire, one clock per control instruction) and decides whether the
// fetch pipeline is redirected:
//   BRA t   : taken to t
//   CALL t  : taken to t, pushes pc+1 on the return stack
//   RET     : taken to the top of the return stack, pops it
//   LOOP n  : loads the loop counter with n (not a branch)
//   ENDL t  : decrements the loop counter; taken to t while it stays above 0,
//             so a body closed by ENDL runs n times
// taken, target, push, pop and push_addr are combinational from the inputs;
// the loop counter is a register. The published design names a branch block
// and single-cycle DSP-style loop instructions but does not describe them; the
// single loop counter and the exact loop semantics are this design's.
module branch_unit
  import egpu_pkg::*;
(
  input  logic           clk,
  input  logic           rst,
  input  logic           fire,
  input  opcode_e        opc,
  input  logic [15:0]    imm,
  input  logic [PCW-1:0] pc,
  input  logic [PCW-1:0] stack_top,
  output logic           taken,
  output logic [PCW-1:0] target,
  output logic           push,
  output logic           pop,
  output logic [PCW-1:0] push_addr,
  output logic [15:0]    loop_count
);
  always_comb begin
    taken     = 1'b0;
    target    = imm[PCW-1:0];
    push      = 1'b0;
    pop       = 1'b0;
    push_addr = pc + 1'b1;
    if (fire) begin
      unique case (opc)
        OP_BRA:  taken = 1'b1;
        OP_CALL: begin taken = 1'b1; push = 1'b1; end
        OP_RET:  begin taken = 1'b1; pop = 1'b1; target = stack_top; end
        OP_ENDL: taken = (loop_count > 16'd1);
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst) loop_count <= '0;
    else if (fire && opc == OP_LOOP) loop_count <= imm;
    else if (fire && opc == OP_ENDL && loop_count != '0) loop_count <= loop_count - 1'b1;
  end
endmodule
