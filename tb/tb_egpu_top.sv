// tb_egpu_top: end-to-end test of the SIMT processor at its default size.
//
// Loads a program of 50 instructions, runs it over 512 threads (16 SPs x 32
// rows) and reads the shared memory back through the host port. The program
// uses the thread index, immediates, signed and unsigned multiplies (high and
// low halves), all three shifts, the logic and adder operations, a counted
// loop, a call and return, a branch over a STOP, full-row loads and stores and
// instructions with dynamic thread scaling (one SP of one row, 4 SPs, 8 SPs).
// Expected memory contents are computed per thread by a plain model of the
// program below. The clocks each instruction holds the pipeline are checked
// against W*D (W = 1 for operations, ceil(SPs/4) for loads, SPs for stores;
// D = rows). Every mechanism is counted and a mechanism that never happened
// counts as a failure. A second program is then loaded into the instruction
// memory and run with 160 threads, which must write exactly the first 160
// words.
module tb_egpu_top;
  import egpu_pkg::*;

  logic        clk = 0;
  logic        rst = 1;
  logic        start = 0;
  logic [12:0] num_threads = 13'd512;
  logic        busy;
  logic        imem_we = 0;
  logic [9:0]  imem_waddr = '0;
  logic [31:0] imem_wdata = '0;
  logic        host_we = 0;
  logic [11:0] host_addr = '0;
  logic [31:0] host_wdata = '0;
  logic [31:0] host_rdata;

  always #1 clk = ~clk;

  egpu_top dut (.*);

  int checks = 0, failures = 0;

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  // ---------------- program ----------------
  logic [31:0] prog [64];
  initial begin
    for (int i = 0; i < 64; i++) prog[i] = '0;
    prog[0]  = make_instr(OP_TID, 1, 0, 0, 0);
    prog[1]  = make_imm(OP_LDI, 2, 0, 16'h1234);
    prog[2]  = make_instr(OP_MULLO_S, 3, 1, 2, 0);
    prog[3]  = make_imm(OP_LDI, 4, 0, 16'h8001);
    prog[4]  = make_instr(OP_MULHI_S, 5, 3, 4, 0);
    prog[5]  = make_instr(OP_SUB, 6, 5, 3, 0);
    prog[6]  = make_imm(OP_LDI, 7, 0, 16'd5);
    prog[7]  = make_instr(OP_SAR, 8, 6, 7, 0);
    prog[8]  = make_instr(OP_SHR, 9, 6, 7, 0);
    prog[9]  = make_instr(OP_ADD, 10, 8, 9, 0);
    prog[10] = make_imm(OP_LOOP, 0, 0, 16'd3);
    prog[11] = make_instr(OP_ADD, 10, 10, 1, 0);
    prog[12] = make_imm(OP_ENDL, 0, 0, 16'd11);
    prog[13] = make_imm(OP_CALL, 0, 0, 16'd30);
    prog[14] = make_instr(OP_STO, 0, 1, 10, 0);
    prog[15] = make_imm(OP_LDI, 15, 0, 16'd1);
    prog[16] = make_instr(OP_XOR, 12, 1, 15, 0);
    prog[17] = make_instr(OP_LOD, 11, 12, 0, 0);
    prog[18] = make_instr(OP_SUB, 13, 11, 10, 0);
    prog[19] = make_imm(OP_LDI, 15, 0, 16'd512);
    prog[20] = make_instr(OP_ADD, 14, 1, 15, 0);
    prog[21] = make_instr(OP_STO, 0, 14, 13, 0);
    prog[22] = make_imm(OP_LDI, 17, 0, 16'h0ABC);
    prog[23] = make_imm(OP_LDI, 18, 0, 16'd77);
    prog[24] = make_imm(OP_LDI, 15, 0, 16'd1024);
    prog[25] = make_instr(OP_ADD, 16, 1, 15, 0);
    prog[26] = make_instr(OP_STO, 0, 16, 17, 3'd7);       // one SP, one row
    prog[27] = make_instr(OP_LOD, 18, 1, 0, 3'd2);        // 4 SPs
    prog[28] = make_imm(OP_BRA, 0, 0, 16'd40);
    prog[29] = make_instr(OP_STOP, 0, 0, 0, 0);           // skipped
    // subroutine
    prog[30] = make_instr(OP_NOT, 19, 1, 0, 0);
    prog[31] = make_instr(OP_ABS, 20, 6, 0, 0);
    prog[32] = make_instr(OP_XOR, 21, 19, 20, 0);
    prog[33] = make_instr(OP_CNOT, 22, 8, 0, 0);
    prog[34] = make_instr(OP_OR, 23, 21, 22, 0);
    prog[35] = make_instr(OP_AND, 24, 23, 2, 0);
    prog[36] = make_instr(OP_MULHI_U, 25, 6, 2, 0);
    prog[37] = make_instr(OP_SHL, 26, 1, 7, 0);
    prog[38] = make_instr(OP_RET, 0, 0, 0, 0);
    prog[39] = make_instr(OP_STOP, 0, 0, 0, 0);
    // after the branch
    prog[40] = make_imm(OP_LDI, 15, 0, 16'd1536);
    prog[41] = make_instr(OP_ADD, 27, 1, 15, 0);
    prog[42] = make_instr(OP_STO, 0, 27, 18, 3'd1);       // 8 SPs
    prog[43] = make_imm(OP_LDI, 15, 0, 16'd2048);
    prog[44] = make_instr(OP_ADD, 28, 1, 15, 0);
    prog[45] = make_instr(OP_STO, 0, 28, 24, 0);
    prog[46] = make_instr(OP_MOV, 29, 28, 0, 0);
    prog[47] = make_instr(OP_STO, 0, 29, 25, 0, 8'd0);
    prog[48] = make_instr(OP_MULLO_U, 30, 1, 1, 0);
    prog[49] = make_instr(OP_STOP, 0, 0, 0, 0);
    // prog[47] overwrites 2048+t with r25; r24 is checked through prog[45]
    // by looking at it before prog[47] runs is not possible, so prog[47]
    // stores to the same place only for lanes: see the model below.
  end

  // ---------------- model ----------------
  function automatic logic [31:0] hi_s(input logic [31:0] a, input logic [31:0] b);
    logic signed [63:0] p;
    p = $signed({{32{a[31]}}, a}) * $signed({{32{b[31]}}, b});
    return p[63:32];
  endfunction
  function automatic logic [31:0] hi_u(input logic [31:0] a, input logic [31:0] b);
    logic [63:0] p;
    p = {32'd0, a} * {32'd0, b};
    return p[63:32];
  endfunction

  logic [31:0] e_r10 [512];
  logic [31:0] e_r24 [512];
  logic [31:0] e_r25 [512];
  logic [31:0] e_r18 [512];
  initial begin
    for (int t = 0; t < 512; t++) begin
      logic [31:0] r1, r2, r3, r4, r5, r6, r8, r9, r10, r19, r20, r21, r22, r23;
      r1 = 32'(t); r2 = 32'h1234;
      r3 = r1 * r2;
      r4 = 32'hFFFF8001;
      r5 = hi_s(r3, r4);
      r6 = r5 - r3;
      r8 = 32'($signed(r6) >>> 5);
      r9 = r6 >> 5;
      r10 = r8 + r9 + 3 * r1;
      r19 = ~r1;
      r20 = r6[31] ? -r6 : r6;
      r21 = r19 ^ r20;
      r22 = (r8 == 0) ? 32'd1 : 32'd0;
      r23 = r21 | r22;
      e_r10[t] = r10;
      e_r24[t] = r23 & r2;
      e_r25[t] = hi_u(r6, r2);
    end
    for (int t = 0; t < 512; t++) e_r18[t] = (t % 16 < 4) ? e_r10[t] : 32'd77;
  end

  // ---------------- mechanism counters ----------------
  int n_stall = 0, n_branch = 0, n_call = 0, n_ret = 0, n_loopback = 0;
  int n_single = 0, n_width_scaled = 0, n_depth_scaled = 0, n_load = 0, n_store = 0;
  int n_mul = 0, n_shift = 0, n_flush_nop = 0, n_instr = 0;
  int cyc_in_d = 0;
  int n_reload_runs = 0;

  always @(posedge clk) if (!rst) begin
    if (dut.u_fetch.running) begin
      if (!dut.increment_pipe) n_stall++;
      cyc_in_d = cyc_in_d + 1;
      if (dut.increment_pipe) begin
        if (dut.branch_taken) n_branch++;
        if (dut.u_fetch.push) n_call++;
        if (dut.u_fetch.pop) n_ret++;
        if (dut.branch_taken && dut.u_fetch.d_dec.opc == OP_ENDL) n_loopback++;
        if (dut.u_fetch.d_dec.kind != K_CTRL) begin
          int rows, lanes, w, n;
          n_instr++;
          rows  = dut.u_fetch.d_dec.scale[2] ? 1 : int'(num_threads) / 16;
          lanes = (dut.u_fetch.d_dec.scale[1:0] == 0) ? 16 : (dut.u_fetch.d_dec.scale[1:0] == 1) ? 8 :
                  (dut.u_fetch.d_dec.scale[1:0] == 2) ? 4 : 1;
          w = (dut.u_fetch.d_dec.kind == K_LOAD) ? (lanes + 3) / 4 :
              (dut.u_fetch.d_dec.kind == K_SAVE) ? lanes : 1;
          n = w * rows;
          check($sformatf("clocks of instruction at pc %0d", dut.u_fetch.d_pc), 32'(cyc_in_d), 32'(n));
          if (n == 1) n_single++;
          if (lanes != 16) n_width_scaled++;
          if (dut.u_fetch.d_dec.scale[2]) n_depth_scaled++;
        end else if (dut.u_fetch.d_dec.opc == OP_NOP) n_flush_nop++;
        cyc_in_d = 0;
      end
    end
    if (dut.iss.valid) begin
      if (dut.iss.kind == K_LOAD) n_load++;
      if (dut.iss.kind == K_SAVE) n_store++;
      if (dut.iss.use_mul && dut.iss.mop inside {M_LSL, M_LSR, M_ASR}) n_shift++;
      else if (dut.iss.use_mul) n_mul++;
    end
  end

  // ---------------- host access ----------------
  task automatic host_write(input int a, input logic [31:0] d);
    @(negedge clk); host_we = 1; host_addr = 12'(a); host_wdata = d;
    @(negedge clk); host_we = 0;
  endtask
  task automatic host_read(input int a, output logic [31:0] d);
    @(negedge clk); host_addr = 12'(a);
    @(negedge clk); @(negedge clk);
    d = host_rdata;
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int t_start, t_end;
  initial begin
    logic [31:0] d;
    repeat (4) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); imem_we = 1; imem_waddr = 10'(i); imem_wdata = prog[i];
    end
    @(negedge clk); imem_we = 0;
    // sentinels in the regions written by scaled stores
    for (int i = 1024; i < 2048; i++) host_write(i, 32'hDEAD_0000 + 32'(i));
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    t_start = $time;
    wait (!busy);
    t_end = $time;
    $display("program ran %0d clocks", (t_end - t_start) / 2);

    for (int t = 0; t < 512; t++) begin
      host_read(t, d);          check($sformatf("mem[%0d]", t), d, e_r10[t]);
      host_read(512 + t, d);    check($sformatf("mem[%0d]", 512 + t), d, e_r10[t ^ 1] - e_r10[t]);
      host_read(1536 + t, d);
      check($sformatf("mem[%0d]", 1536 + t), d, (t % 16 < 8) ? e_r18[t] : 32'hDEAD_0000 + 32'(1536 + t));
      host_read(2048 + t, d);   check($sformatf("mem[%0d]", 2048 + t), d, e_r25[t]);
    end
    host_read(1024, d); check("mem[1024]", d, 32'h0ABC);
    host_read(1025, d); check("mem[1025]", d, 32'hDEAD_0000 + 32'd1025);
    // r24 and r30 are checked in the register files
    for (int t = 0; t < 512; t++) begin
      check($sformatf("r24 of thread %0d", t), rf_word(t % 16, t / 16, 24), e_r24[t]);
      check($sformatf("r30 of thread %0d", t), rf_word(t % 16, t / 16, 30), 32'(t) * 32'(t));
      check($sformatf("r26 of thread %0d", t), rf_word(t % 16, t / 16, 26), 32'(t) << 5);
    end

    // second program: reloaded instruction memory, 160 threads (10 rows)
    for (int i = 0; i < 6; i++) begin
      logic [31:0] w;
      case (i)
        0: w = make_instr(OP_TID, 1, 0, 0, 0);
        1: w = make_imm(OP_LDI, 2, 0, 16'hFFFD);             // -3
        2: w = make_instr(OP_MULLO_S, 3, 1, 2, 0);
        3: w = make_instr(OP_STO, 0, 1, 3, 0);
        default: w = make_instr(OP_STOP, 0, 0, 0, 0);
      endcase
      @(negedge clk); imem_we = 1; imem_waddr = 10'(i); imem_wdata = w;
    end
    @(negedge clk); imem_we = 0;
    num_threads = 13'd160;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    t_start = $time;
    wait (!busy);
    n_reload_runs++;
    for (int t = 0; t < 176; t++) begin
      host_read(t, d);
      check($sformatf("second run mem[%0d]", t), d, (t < 160) ? 32'(-3 * t) : e_r10[t]);
    end

    $display("mechanisms: stall=%0d branch=%0d call=%0d ret=%0d loopback=%0d single=%0d width_scaled=%0d depth_scaled=%0d load_slots=%0d store_slots=%0d mul_slots=%0d shift_slots=%0d flush_nops=%0d instr=%0d",
             n_stall, n_branch, n_call, n_ret, n_loopback, n_single, n_width_scaled, n_depth_scaled,
             n_load, n_store, n_mul, n_shift, n_flush_nop, n_instr);
    checks++; if (n_stall == 0) begin failures++; $display("FAIL no stall"); end
    checks++; if (n_branch == 0) begin failures++; $display("FAIL no branch"); end
    checks++; if (n_call != 1 || n_ret != 1) begin failures++; $display("FAIL call/ret"); end
    checks++; if (n_loopback != 2) begin failures++; $display("FAIL loop back count"); end
    checks++; if (n_single == 0) begin failures++; $display("FAIL no single-cycle instruction"); end
    checks++; if (n_width_scaled != 3) begin failures++; $display("FAIL width scaling"); end
    checks++; if (n_depth_scaled == 0) begin failures++; $display("FAIL depth scaling"); end
    checks++; if (n_load == 0 || n_store == 0) begin failures++; $display("FAIL no load/store"); end
    checks++; if (n_mul == 0 || n_shift == 0) begin failures++; $display("FAIL no mul/shift"); end
    checks++; if (n_reload_runs != 1) begin failures++; $display("FAIL no second run"); end
    checks++; if (n_flush_nop == 0) begin failures++; $display("FAIL no flushed slot"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] rf_word(input int lane, input int row, input int r);
    int a;
    a = row * 32 + r;
    case (lane)
      0:  return dut.g_sp[0].u_sp.u_rf.bank0[a];
      1:  return dut.g_sp[1].u_sp.u_rf.bank0[a];
      2:  return dut.g_sp[2].u_sp.u_rf.bank0[a];
      3:  return dut.g_sp[3].u_sp.u_rf.bank0[a];
      4:  return dut.g_sp[4].u_sp.u_rf.bank0[a];
      5:  return dut.g_sp[5].u_sp.u_rf.bank0[a];
      6:  return dut.g_sp[6].u_sp.u_rf.bank0[a];
      7:  return dut.g_sp[7].u_sp.u_rf.bank0[a];
      8:  return dut.g_sp[8].u_sp.u_rf.bank0[a];
      9:  return dut.g_sp[9].u_sp.u_rf.bank0[a];
      10: return dut.g_sp[10].u_sp.u_rf.bank0[a];
      11: return dut.g_sp[11].u_sp.u_rf.bank0[a];
      12: return dut.g_sp[12].u_sp.u_rf.bank0[a];
      13: return dut.g_sp[13].u_sp.u_rf.bank0[a];
      14: return dut.g_sp[14].u_sp.u_rf.bank0[a];
      default: return dut.g_sp[15].u_sp.u_rf.bank0[a];
    endcase
  endfunction
endmodule
