// tb_regfile: random writes and reads on both ports against an array model,
// read data one clock after the address, old data on a same-clock write.
module tb_regfile;
  logic clk = 0;
  always #1 clk = ~clk;
  logic [9:0] ra0, ra1, wa;
  logic [31:0] rd0, rd1, wd;
  logic we;
  regfile dut (.clk, .ra0, .ra1, .rd0, .rd1, .we, .wa, .wd);
  int checks = 0, failures = 0;
  logic [31:0] model [1024];
  logic [31:0] e0, e1;
  logic        valid0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 1;
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk); wa = 10'(i); wd = $urandom; model[i] = wd;
    end
    valid0 = 0;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      if (valid0) begin
        checks += 2;
        if (rd0 !== e0 || rd1 !== e1) begin failures++; if (failures < 10) $display("FAIL %h %h exp %h %h", rd0, rd1, e0, e1); end
      end
      ra0 = $urandom; ra1 = (i % 3 == 0) ? ra0 : 10'($urandom);
      we = $urandom_range(0, 1); wa = (i % 5 == 0) ? ra0 : 10'($urandom); wd = $urandom;
      e0 = model[ra0]; e1 = model[ra1];
      if (we) model[wa] = wd;
      valid0 = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
