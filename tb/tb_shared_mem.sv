// tb_shared_mem: writes through the 16:1 write muxes (one SP per clock),
// reads through the 16:4 read address mux (four SPs per clock), and checks the
// data on each read port two clocks after the read against an array model,
// including a read one clock after a write to the same word.
module tb_shared_mem;
  import egpu_pkg::*;
  logic clk = 0;
  always #1 clk = ~clk;
  logic [31:0] addr [16];
  logic [31:0] wdata [16];
  logic rd_en, wr_en, rvalid;
  logic [1:0] rd_grp, rgrp;
  logic [3:0] wr_lane;
  logic [31:0] rdata [4];
  shared_mem dut (.clk, .addr, .wdata, .rd_en, .rd_grp, .wr_en, .wr_lane, .rdata, .rvalid, .rgrp);
  int checks = 0, failures = 0;
  logic [31:0] model [4096];
  typedef struct { logic v; logic [1:0] g; logic [31:0] d [4]; } exp_t;
  exp_t q [$];

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic drive(input bit do_rd, input bit do_wr);
    exp_t e;
    for (int l = 0; l < 16; l++) begin addr[l] = $urandom_range(0, 4095); wdata[l] = $urandom; end
    rd_en = do_rd; rd_grp = $urandom; wr_en = do_wr; wr_lane = $urandom;
    e.v = do_rd; e.g = rd_grp;
    // the array is written at the end of clock 1, the read samples it at the end of clock 1 too
    for (int j = 0; j < 4; j++) e.d[j] = model[addr[rd_grp * 4 + j][11:0]];
    q.push_back(e);
    if (do_wr) begin
      // apply write after the reads of this same slot
      model[addr[wr_lane][11:0]] = wdata[wr_lane];
    end
  endtask

  initial begin
    rd_en = 0; wr_en = 0;
    // fill memory through the write port
    for (int a = 0; a < 4096; a++) begin
      @(negedge clk);
      for (int l = 0; l < 16; l++) begin addr[l] = 32'(a); wdata[l] = 32'(a) * 32'h9E37 + 32'(l); end
      wr_lane = 4'(a % 16); wr_en = 1; rd_en = 0;
      model[a] = wdata[a % 16];
    end
    @(negedge clk); wr_en = 0;
    repeat (3) @(negedge clk);
    q.delete();
    for (int i = 0; i < 4000; i++) begin
      drive($urandom_range(0, 1), $urandom_range(0, 1));
      @(negedge clk);
      if (i >= 1) begin
        exp_t e;
        e = q.pop_front();
        checks++;
        if (rvalid !== e.v) failures++;
        if (e.v) begin
          checks++;
          if (rgrp !== e.g || rdata[0] !== e.d[0] || rdata[1] !== e.d[1] || rdata[2] !== e.d[2] || rdata[3] !== e.d[3]) begin
            failures++; if (failures < 10) $display("FAIL i=%0d %h exp %h", i, rdata[0], e.d[0]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
