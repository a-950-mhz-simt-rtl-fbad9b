// tb_ctrl_delay_chain: random issue slots must come out unchanged exactly
// three clocks later; reset clears the valid bits.
module tb_ctrl_delay_chain;
  import egpu_pkg::*;
  logic clk = 0;
  always #1 clk = ~clk;
  logic rst;
  issue_t d, q;
  ctrl_delay_chain dut (.clk, .rst, .d, .q);
  int checks = 0, failures = 0;
  issue_t hist [$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; d = '0;
    repeat (4) @(negedge clk);
    checks++;
    if (q.valid !== 1'b0) failures++;
    rst = 0;
    for (int i = 0; i < 2000; i++) begin
      d = issue_t'({$urandom, $urandom, $urandom});
      hist.push_back(d);
      @(negedge clk);
      if (i >= 2) begin
        issue_t e;
        e = hist.pop_front();
        checks++;
        if (q !== e) begin failures++; if (failures < 10) $display("FAIL i=%0d", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
