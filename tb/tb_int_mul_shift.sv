// tb_int_mul_shift: checks multiplies (signed/unsigned, high/low half) and the
// three shifts against SystemVerilog arithmetic, for random and corner
// operands and shift amounts 0..40, one new operation every clock; each result
// must appear exactly 7 clocks after its operands. Includes the 12-bit example
// of the arithmetic shift (-913 >> 5 = -29) in 32-bit form.
module tb_int_mul_shift;
  import egpu_pkg::*;
  logic clk = 0;
  always #1 clk = ~clk;
  logic [31:0] aa, bb, cc;
  mul_op_e op;
  int_mul_shift dut (.clk, .aa, .bb, .op, .cc);
  int checks = 0, failures = 0;
  logic [31:0] exp_q [$];

  function automatic logic [31:0] model(logic [31:0] a, logic [31:0] b, mul_op_e o);
    logic signed [63:0] ps;
    logic [63:0] pu;
    ps = $signed({{32{a[31]}}, a}) * $signed({{32{b[31]}}, b});
    pu = {32'd0, a} * {32'd0, b};
    case (o)
      M_LO_U: return pu[31:0];
      M_LO_S: return ps[31:0];
      M_HI_U: return pu[63:32];
      M_HI_S: return ps[63:32];
      M_LSL:  return (b > 31) ? 32'd0 : a << b[4:0];
      M_LSR:  return (b > 31) ? 32'd0 : a >> b[4:0];
      default: return (b > 31) ? {32{a[31]}} : 32'($signed(a) >>> b[4:0]);
    endcase
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    n = 0;
    for (int i = 0; i < 3000 + 7; i++) begin
      @(negedge clk);
      if (i >= 7) begin
        logic [31:0] e;
        e = exp_q.pop_front();
        checks++;
        if (cc !== e) begin
          failures++;
          if (failures < 10) $display("FAIL i=%0d got %h exp %h", i, cc, e);
        end
      end
      op = mul_op_e'($urandom_range(0, 6));
      case (i % 6)
        0: begin aa = $urandom; bb = $urandom; end
        1: begin aa = 32'h8000_0000 | $urandom; bb = 32'hFFFF_0000 | $urandom; end
        2: begin aa = {$urandom} % 3 == 0 ? 32'h8000_0000 : 32'h7FFF_FFFF; bb = 32'hFFFF_FFFF; end
        default: begin aa = $urandom; bb = $urandom_range(0, 40); end
      endcase
      if (i == 100) begin aa = 32'(-913); bb = 5; op = M_ASR; end
      if (i == 101) begin aa = 32'(-913); bb = 5; op = M_LSR; end
      exp_q.push_back(model(aa, bb, op));
      if (i == 107 && cc !== 32'(-29)) begin failures++; $display("FAIL -913>>>5"); end
      if (i == 107) checks++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
