// tb_block_sizes: all scale codes and classes for thread counts 16..4096 in
// steps of 16 (with MAX_ROWS = 256), plus 0 and values above the maximum,
// against the formulas W = 1 / ceil(SPs/4) / SPs and the one-clock-early
// compare values.
module tb_block_sizes;
  import egpu_pkg::*;
  logic [12:0] num_threads;
  logic [2:0] scale;
  kind_e kind;
  logic [4:0] w_last, pre_w;
  logic [7:0] d_last, pre_d;
  logic pre_ok, single;
  logic [15:0] lane_mask;
  block_sizes #(.MAX_ROWS(256)) dut (.*);
  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int nt = 0; nt <= 4096 + 64; nt += 16) begin
      for (int s = 0; s < 8; s++) begin
        for (int k = 0; k < 4; k++) begin
          int rows, lanes, w, n, epw, epd;
          bit eok;
          num_threads = 13'(nt > 8191 ? 8191 : nt); scale = 3'(s); kind = kind_e'(k);
          #1;
          rows = nt / 16; if (rows == 0) rows = 1; if (rows > 256) rows = 256;
          if (s >= 4) rows = 1;
          lanes = (s % 4 == 0) ? 16 : (s % 4 == 1) ? 8 : (s % 4 == 2) ? 4 : 1;
          w = (k == 2) ? (lanes + 3) / 4 : (k == 3) ? lanes : 1;
          n = w * rows;
          // (pre_w, pre_d) is the position of clock n-2 in row-major order
          eok = (n >= 2);
          epw = eok ? (n - 2) % w : 0;
          epd = eok ? (n - 2) / w : 0;
          checks++;
          if (int'(w_last) != w - 1 || int'(d_last) != rows - 1 || pre_ok != eok ||
              (eok && (int'(pre_w) != epw || int'(pre_d) != epd)) ||
              single != (k == 0 || n == 1) || lane_mask != 16'((32'd1 << lanes) - 1)) begin
            failures++;
            if (failures < 10) $display("FAIL nt=%0d s=%0d k=%0d: %0d %0d %0d %0d %0d", nt, s, k, w_last, d_last, pre_w, pre_d, pre_ok);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
