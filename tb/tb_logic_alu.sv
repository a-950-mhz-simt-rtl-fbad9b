// tb_logic_alu: random operands and operations every clock, compared with a
// model 7 clocks later (the depth-matched latency). Covers carries across the
// 16-bit split of the pipelined adder, ABS of the most negative value and CNOT.
module tb_logic_alu;
  import egpu_pkg::*;
  logic clk = 0;
  always #1 clk = ~clk;
  logic [31:0] a, b, y;
  alu_op_e op;
  logic_alu dut (.clk, .a, .b, .op, .y);
  int checks = 0, failures = 0;
  logic [31:0] exp_q [$];

  function automatic logic [31:0] model(logic [31:0] x, logic [31:0] z, alu_op_e o);
    case (o)
      A_AND:  return x & z;
      A_OR:   return x | z;
      A_XOR:  return x ^ z;
      A_NOT:  return ~x;
      A_CNOT: return (x == 0) ? 32'd1 : 32'd0;
      A_ADD:  return x + z;
      A_SUB:  return x - z;
      A_ABS:  return x[31] ? -x : x;
      A_PASSA: return x;
      default: return z;
    endcase
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3007; i++) begin
      @(negedge clk);
      if (i >= 7) begin
        logic [31:0] e;
        e = exp_q.pop_front();
        checks++;
        if (y !== e) begin failures++; if (failures < 10) $display("FAIL i=%0d got %h exp %h", i, y, e); end
      end
      op = alu_op_e'($urandom_range(0, 9));
      case (i % 4)
        0: begin a = $urandom; b = $urandom; end
        1: begin a = 32'h0000_FFFF; b = $urandom_range(0, 3); end
        2: begin a = ($urandom % 2) ? 32'h8000_0000 : 32'd0; b = $urandom; end
        default: begin a = $urandom; b = ~a + $urandom_range(0, 2); end
      endcase
      exp_q.push_back(model(a, b, op));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
