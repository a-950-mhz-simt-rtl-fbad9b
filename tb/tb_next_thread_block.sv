// tb_next_thread_block: acts as the decode stage register, presenting random
// instructions (operations, loads, saves, control, with random thread counts
// and dynamic thread scales) and loading the next one whenever increment_pipe
// is high. Each instruction must hold the pipe for exactly W*D clocks, with
// increment_pipe high only in its last clock, and must step through rows and
// width positions in row-major order from (0,0).
module tb_next_thread_block;
  import egpu_pkg::*;
  logic clk = 0;
  always #1 clk = ~clk;
  logic rst, run;
  logic [12:0] num_threads;
  logic [2:0] scale;
  logic op_instr, load_instr, save_instr, single_instr, increment_pipe;
  logic [7:0] row;
  logic [3:0] wid;
  logic [15:0] lane_mask;
  next_thread_block dut (.*);
  int checks = 0, failures = 0;
  int n_multi = 0, n_single = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; run = 0; num_threads = 64; scale = 0;
    op_instr = 0; load_instr = 0; save_instr = 0; single_instr = 1;
    @(negedge clk); @(negedge clk); rst = 0; run = 1;
    // the initial single-cycle NOP
    @(negedge clk);
    for (int j = 0; j < 600; j++) begin
      int k, rows, lanes, w, n, cnt;
      bit done;
      k = $urandom_range(0, 3);
      num_threads = 13'(16 * $urandom_range(1, 32));
      scale = $urandom;
      rows = scale[2] ? 1 : int'(num_threads) / 16;
      lanes = (scale[1:0] == 0) ? 16 : (scale[1:0] == 1) ? 8 : (scale[1:0] == 2) ? 4 : 1;
      w = (k == 2) ? (lanes + 3) / 4 : (k == 3) ? lanes : 1;
      n = (k == 0) ? 1 : w * rows;
      op_instr = (k == 1); load_instr = (k == 2); save_instr = (k == 3);
      single_instr = (n == 1);
      #0.1;
      if (n == 1) n_single++; else n_multi++;
      cnt = 0;
      done = 0;
      while (!done) begin
        checks++;
        if (increment_pipe !== (cnt == n - 1)) begin
          failures++;
          if (failures < 10) $display("FAIL j=%0d k=%0d n=%0d cnt=%0d inc=%0d", j, k, n, cnt, increment_pipe);
        end
        if (k != 0) begin
          checks++;
          if (int'(row) != cnt / w || int'(wid) != (k == 1 ? 0 : cnt % w) ||
              lane_mask != 16'((32'd1 << lanes) - 1)) begin
            failures++;
            if (failures < 10) $display("FAIL position j=%0d k=%0d n=%0d w=%0d cnt=%0d row=%0d wid=%0d", j, k, n, w, cnt, row, wid);
          end
        end
        done = increment_pipe || cnt > n + 2;
        @(negedge clk);
        cnt++;
      end
    end
    checks++;
    if (n_multi == 0 || n_single == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
