// tb_call_stack: random push/pop against a queue model of depth 8 (a push
// onto a full stack drops the oldest entry, a pop of an empty stack gives 0).
module tb_call_stack;
  logic clk = 0;
  always #1 clk = ~clk;
  logic rst, push, pop, empty;
  logic [9:0] din, top;
  call_stack dut (.clk, .rst, .push, .pop, .din, .top, .empty);
  int checks = 0, failures = 0;
  logic [9:0] m [$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; push = 0; pop = 0; din = 0;
    @(negedge clk); @(negedge clk); rst = 0;
    for (int i = 0; i < 4000; i++) begin
      logic [9:0] et;
      et = (m.size() == 0) ? 10'd0 : m[0];
      checks += 2;
      if (top !== et || empty !== (m.size() == 0)) begin
        failures++; if (failures < 10) $display("FAIL top %h exp %h", top, et);
      end
      push = ($urandom_range(0, 9) < ((i / 500) % 2 ? 7 : 3));
      pop = !push && $urandom_range(0, 1);
      din = $urandom;
      if (push) begin m.push_front(din); if (m.size() > 8) void'(m.pop_back()); end
      else if (pop && m.size() > 0) void'(m.pop_front());
      @(negedge clk);
      push = 0; pop = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
