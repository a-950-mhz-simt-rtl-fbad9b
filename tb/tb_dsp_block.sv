// tb_dsp_block: checks both DSP Block modes against plain products with random
// signed operands, including the extreme values, and checks the three-clock
// latency by comparing with the operands applied three clocks earlier.
module tb_dsp_block;
  logic clk = 0;
  always #1 clk = ~clk;
  logic signed [18:0] ax, bx;
  logic signed [17:0] ay, by;
  logic signed [36:0] i0, i1, s0, s1;
  dsp_block #(.MODE_SUM(1'b0)) u_ind (.clk, .ax, .ay, .bx, .by, .r0(i0), .r1(i1));
  dsp_block #(.MODE_SUM(1'b1)) u_sum (.clk, .ax, .ay, .bx, .by, .r0(s0), .r1(s1));
  int checks = 0, failures = 0;
  logic signed [36:0] e0 [$], e1 [$], es [$];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      if (n % 50 == 0) begin ax = -19'sd262144; ay = -18'sd131072; bx = 19'sd262143; by = -18'sd131072; end
      else begin ax = 19'($urandom); ay = 18'($urandom); bx = 19'($urandom); by = 18'($urandom); end
      e0.push_back(37'(ax * ay));
      e1.push_back(37'(bx * by));
      es.push_back(37'(ax * ay) + 37'(bx * by));
      if (n >= 3) begin
        logic signed [36:0] x0, x1, xs;
        x0 = e0.pop_front(); x1 = e1.pop_front(); xs = es.pop_front();
        checks += 3;
        if (i0 !== x0 || i1 !== x1 || s0 !== xs) begin
          failures++;
          $display("FAIL n=%0d got %h %h %h exp %h %h %h", n, i0, i1, s0, x0, x1, xs);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
