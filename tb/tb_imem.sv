// tb_imem: loads the memory through the write port, then reads it with the
// enable toggling: the output must follow the address one enabled clock later
// and hold while en is low.
module tb_imem;
  logic clk = 0;
  always #1 clk = ~clk;
  logic en, we;
  logic [9:0] raddr, waddr;
  logic [31:0] rdata, wdata;
  imem dut (.clk, .en, .raddr, .rdata, .we, .waddr, .wdata);
  int checks = 0, failures = 0;
  logic [31:0] model [1024];
  logic [31:0] expect_q;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; we = 1;
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk); waddr = 10'(i); wdata = $urandom ^ 32'(i * 7); model[i] = wdata;
    end
    @(negedge clk); we = 0; en = 1; raddr = 0;
    @(negedge clk); expect_q = model[0];
    for (int i = 0; i < 3000; i++) begin
      checks++;
      if (rdata !== expect_q) begin failures++; if (failures < 10) $display("FAIL %h exp %h", rdata, expect_q); end
      en = $urandom_range(0, 1);
      raddr = $urandom;
      if (en) expect_q = model[raddr];
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
