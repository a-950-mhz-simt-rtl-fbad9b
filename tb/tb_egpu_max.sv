// tb_egpu_max: the largest configuration - 4096 threads (256 rows of 16) with
// 16 registers each, 64K registers in all - running one program over all
// threads. Every thread squares its index, subtracts 7, shifts right
// arithmetically by 7 and stores the result; then each thread loads the word
// of its mirror thread (4095 - t), adds its own index and stores that. All
// 4096 shared-memory words are checked against a model, and the run time is
// checked against the per-instruction clock counts (256 per operation, 1024
// per load, 4096 per store).
module tb_egpu_max;
  import egpu_pkg::*;
  logic        clk = 0;
  logic        rst = 1;
  logic        start = 0;
  logic [12:0] num_threads = 13'd4096;
  logic        busy;
  logic        imem_we = 0;
  logic [9:0]  imem_waddr = '0;
  logic [31:0] imem_wdata = '0;
  logic        host_we = 0;
  logic [11:0] host_addr = '0;
  logic [31:0] host_wdata = '0;
  logic [31:0] host_rdata;

  always #1 clk = ~clk;

  egpu_top #(.MAX_THREADS(4096), .REGS_PER_THREAD(16)) dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] prog [12];
  logic [31:0] r5 [4096];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, clocks, expected;
    logic [31:0] d;
    prog[0]  = make_instr(OP_TID, 1, 0, 0, 0);
    prog[1]  = make_imm(OP_LDI, 2, 0, 16'd7);
    prog[2]  = make_instr(OP_MULLO_U, 3, 1, 1, 0);
    prog[3]  = make_instr(OP_SUB, 4, 3, 2, 0);
    prog[4]  = make_instr(OP_SAR, 5, 4, 2, 0);
    prog[5]  = make_instr(OP_STO, 0, 1, 5, 0);
    prog[6]  = make_imm(OP_LDI, 6, 0, 16'h0FFF);
    prog[7]  = make_instr(OP_XOR, 7, 1, 6, 0);
    prog[8]  = make_instr(OP_LOD, 8, 7, 0, 0);
    prog[9]  = make_instr(OP_ADD, 9, 8, 1, 0);
    prog[10] = make_instr(OP_STO, 0, 1, 9, 0);
    prog[11] = make_instr(OP_STOP, 0, 0, 0, 0);
    for (int t = 0; t < 4096; t++) r5[t] = 32'($signed(32'(t) * 32'(t) - 32'd7) >>> 7);

    repeat (4) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 12; i++) begin
      @(negedge clk); imem_we = 1; imem_waddr = 10'(i); imem_wdata = prog[i];
    end
    @(negedge clk); imem_we = 0;
    start = 1; @(negedge clk); start = 0;
    t0 = int'($time);
    while (dut.u_fetch.running) @(negedge clk);
    clocks = (int'($time) - t0) / 2;
    // 3 fill clocks, 8 operations of 256, one load of 1024, two stores of 4096, STOP
    expected = 3 + 8 * 256 + 1024 + 2 * 4096 + 1;
    checks++;
    if (clocks != expected) begin failures++; $display("FAIL run %0d clocks, expected %0d", clocks, expected); end
    wait (!busy);
    for (int t = 0; t < 4096; t++) begin
      @(negedge clk); host_addr = 12'(t);
      @(negedge clk); @(negedge clk);
      checks++;
      if (host_rdata !== r5[4095 - t] + 32'(t)) begin
        failures++;
        if (failures < 10) $display("FAIL mem[%0d] = %h, expected %h", t, host_rdata, r5[4095 - t] + 32'(t));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
