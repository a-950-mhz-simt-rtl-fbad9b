// tb_branch_unit: BRA, CALL (with return address pc+1), RET (target from the
// stack input), LOOP/ENDL counting (a body closed by ENDL after LOOP n is taken
// n-1 times) and no action without fire.
module tb_branch_unit;
  import egpu_pkg::*;
  logic clk = 0;
  always #1 clk = ~clk;
  logic rst, fire, taken, push, pop;
  opcode_e opc;
  logic [15:0] imm, loop_count;
  logic [9:0] pc, stack_top, target, push_addr;
  branch_unit dut (.*);
  int checks = 0, failures = 0;

  task automatic chk(input string nm, input bit c);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", nm); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; fire = 0; opc = OP_NOP; imm = 0; pc = 0; stack_top = 0;
    @(negedge clk); @(negedge clk); rst = 0;
    for (int i = 0; i < 200; i++) begin
      int n, takes;
      pc = $urandom; imm = $urandom; stack_top = $urandom;
      fire = 1; opc = OP_BRA; #0.5;
      chk("bra", taken && target == imm[9:0] && !push && !pop);
      opc = OP_CALL; #0.1;
      chk("call", taken && target == imm[9:0] && push && push_addr == pc + 10'd1);
      opc = OP_RET; #0.1;
      chk("ret", taken && target == stack_top && pop && !push);
      opc = OP_ADD; #0.1;
      chk("other", !taken && !push && !pop);
      fire = 0; opc = OP_BRA; #0.1;
      chk("no fire", !taken);
      // loop
      n = $urandom_range(1, 6);
      @(negedge clk); fire = 1; opc = OP_LOOP; imm = 16'(n);
      @(negedge clk); opc = OP_ENDL; imm = 16'(pc);
      takes = 0;
      for (int k = 0; k < n; k++) begin
        #0.1; if (taken) takes++;
        @(negedge clk);
      end
      fire = 0;
      chk($sformatf("loop %0d taken %0d", n, takes), takes == n - 1 && loop_count == 16'(n - n));
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
