// tb_instr_fetch: runs a small program through the fetch/decode/sequencer with
// 64 threads (4 rows) and checks the exact stream of issued slots leaving the
// delay chain: instruction (tagged by its rd field), row and width position,
// in order and without gaps inside an instruction. The program has a counted
// loop around a full load (16 slots per pass), a call to a subroutine that
// holds a single-cycle first-row instruction and a branch over an instruction
// that must never issue, a one-SP store, and STOP, after which busy must fall.
// Each taken branch must cost exactly three flushed clocks.
module tb_instr_fetch;
  import egpu_pkg::*;
  logic clk = 0;
  always #1 clk = ~clk;
  logic rst, start, imem_we, busy, increment_pipe, branch_taken;
  logic [12:0] num_threads;
  logic [9:0] imem_waddr;
  logic [31:0] imem_wdata;
  issue_t iss;
  instr_fetch dut (.*);
  int checks = 0, failures = 0;

  typedef struct { int tag; int row; int wid; } slot_t;
  slot_t exp_q [$];
  logic [31:0] prog [16];
  int n_slots = 0, n_taken = 0, gap = 0, t_stop = 0, t_start = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst && dut.running && increment_pipe && branch_taken) n_taken++;

  // compare every issued slot with the expected stream
  always @(negedge clk) if (!rst && iss.valid) begin
    slot_t e;
    n_slots++;
    checks++;
    if (exp_q.size() == 0) begin
      failures++; $display("FAIL unexpected slot tag %0d", iss.rd);
    end else begin
      e = exp_q.pop_front();
      if (int'(iss.rd) != e.tag || int'(iss.row) != e.row || int'(iss.wid) != e.wid) begin
        failures++;
        if (failures < 10) $display("FAIL slot tag %0d row %0d wid %0d, expected %0d %0d %0d",
                                    iss.rd, iss.row, iss.wid, e.tag, e.row, e.wid);
      end
    end
  end

  task automatic expect_instr(int tag, int rows, int w);
    for (int r = 0; r < rows; r++) for (int x = 0; x < w; x++) exp_q.push_back('{tag, r, x});
  endtask

  initial begin
    prog[0]  = make_instr(OP_TID, 1, 0, 0, 0);
    prog[1]  = make_imm(OP_LOOP, 0, 0, 16'd2);
    prog[2]  = make_instr(OP_LOD, 2, 1, 0, 0);
    prog[3]  = make_imm(OP_ENDL, 0, 0, 16'd2);
    prog[4]  = make_imm(OP_CALL, 0, 0, 16'd8);
    prog[5]  = make_instr(OP_STO, 5, 1, 2, 3'd3);
    prog[6]  = make_instr(OP_STOP, 0, 0, 0, 0);
    prog[7]  = make_instr(OP_ADD, 7, 1, 1, 0);      // never reached
    prog[8]  = make_instr(OP_ADD, 8, 1, 1, 3'd4);   // first row only
    prog[9]  = make_imm(OP_BRA, 0, 0, 16'd11);
    prog[10] = make_instr(OP_ADD, 10, 1, 1, 0);     // skipped
    prog[11] = make_instr(OP_RET, 0, 0, 0, 0);
    prog[12] = make_instr(OP_ADD, 12, 1, 1, 0);
    for (int i = 13; i < 16; i++) prog[i] = '0;
    expect_instr(1, 4, 1);
    expect_instr(2, 4, 4);
    expect_instr(2, 4, 4);
    expect_instr(8, 1, 1);
    expect_instr(5, 4, 1);

    rst = 1; start = 0; imem_we = 0; num_threads = 64; imem_waddr = 0; imem_wdata = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); imem_we = 1; imem_waddr = 10'(i); imem_wdata = prog[i];
    end
    @(negedge clk); imem_we = 0;
    checks++; if (busy) failures++;
    start = 1; @(negedge clk); start = 0;
    t_start = int'($time);
    while (dut.running) @(negedge clk);
    t_stop = int'($time);
    wait (!busy);
    repeat (5) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d slots missing", exp_q.size()); end
    // taken: ENDL once, CALL, BRA, RET = 4
    checks++;
    if (n_taken != 4) begin failures++; $display("FAIL taken branches %0d", n_taken); end
    // clocks while running: 3 fill NOPs, slots 41, control instructions
    // (LOOP, ENDL x2, CALL, BRA, RET, STOP) one each, 3 flushed per taken branch
    checks++;
    if ((t_stop - t_start) / 2 != 3 + 41 + 7 + 3 * 4) begin
      failures++; $display("FAIL run clocks %0d", (t_stop - t_start) / 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
