// tb_egpu_reduce: a vector reduction (sum of squares of 512 values) run on
// the default-size processor, using dynamic thread scaling to shrink the
// stores as the reduction narrows.
//
// The host preloads 512 random values x[t] into the shared memory. The
// program then runs in three phases:
//   1. all 512 threads (16 SPs x 32 rows) load x[t], square it and store it
//      back: a full store holds the pipeline for 16 x 32 = 512 clocks;
//   2. only the first row (16 threads) loops over the 32 rows, summing one
//      column each, and stores the 16 partial sums: 16 clocks;
//   3. a single thread sums the 16 partials and stores the total: 1 clock.
// With depth-1 instructions the write-back latency is no longer hidden, so
// the program pads each dependency with NOPs to keep producer and consumer
// at least 9 clocks apart. The testbench checks the squares, the partial
// sums and the total against a model, the clocks of every instruction
// against W*D, and that the three stores took 512, 16 and 1 clocks.
module tb_egpu_reduce;
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

  localparam logic [2:0] ROW0 = 3'b100;   // 16 SPs, first row only
  localparam logic [2:0] ONE  = 3'b111;   // 1 SP, first row only
  localparam int PARTIAL = 1024;
  localparam int TOTAL   = 2000;

  // ---------------- program ----------------
  logic [31:0] prog [64];
  int n_prog;
  initial begin
    int p;
    for (int i = 0; i < 64; i++) prog[i] = make_instr(OP_NOP, 0, 0, 0, 0);
    p = 0;
    prog[p++] = make_instr(OP_TID, 1, 0, 0, 0);
    prog[p++] = make_imm(OP_LDI, 6, 0, 16'd16);
    prog[p++] = make_imm(OP_LDI, 10, 0, 16'(PARTIAL));
    prog[p++] = make_imm(OP_LDI, 11, 0, 16'd1);
    prog[p++] = make_imm(OP_LDI, 12, 0, 16'(TOTAL));
    prog[p++] = make_imm(OP_LDI, 4, 0, 16'd0);
    prog[p++] = make_imm(OP_LDI, 8, 0, 16'd0);
    prog[p++] = make_instr(OP_ADD, 7, 1, 10, 0);          // partial-sum address
    // phase 1: every thread squares its element
    prog[p++] = make_instr(OP_LOD, 2, 1, 0, 0);
    prog[p++] = make_instr(OP_MULLO_S, 3, 2, 2, 0);
    prog[p++] = make_instr(OP_STO, 0, 1, 3, 0);           // 512 clocks
    // phase 2: the first row walks down the 32 rows
    prog[p++] = make_imm(OP_LOOP, 0, 0, 16'd32);
    prog[p++] = make_instr(OP_LOD, 5, 1, 0, ROW0);        // 12: loop start
    prog[p++] = make_instr(OP_ADD, 1, 1, 6, ROW0);
    p += 8;                                               // NOPs
    prog[p++] = make_instr(OP_ADD, 4, 4, 5, ROW0);
    prog[p++] = make_imm(OP_ENDL, 0, 0, 16'd12);
    p += 8;
    prog[p++] = make_instr(OP_STO, 0, 7, 4, ROW0);        // 16 clocks
    // phase 3: one thread sums the partials
    prog[p++] = make_imm(OP_LOOP, 0, 0, 16'd16);
    prog[p++] = make_instr(OP_LOD, 9, 10, 0, ONE);        // 34: loop start
    prog[p++] = make_instr(OP_ADD, 10, 10, 11, ONE);
    p += 8;
    prog[p++] = make_instr(OP_ADD, 8, 8, 9, ONE);
    prog[p++] = make_imm(OP_ENDL, 0, 0, 16'd34);
    p += 8;
    prog[p++] = make_instr(OP_STO, 0, 12, 8, ONE);        // 1 clock
    prog[p++] = make_instr(OP_STOP, 0, 0, 0, 0);
    n_prog = p;
  end

  // ---------------- model ----------------
  logic [31:0] x [512];
  logic [31:0] e_sq [512];
  logic [31:0] e_part [16];
  logic [31:0] e_total;
  initial begin
    for (int t = 0; t < 512; t++) begin
      x[t] = 32'($signed(16'($urandom)));
      e_sq[t] = x[t] * x[t];
    end
    e_total = '0;
    for (int l = 0; l < 16; l++) begin
      e_part[l] = '0;
      for (int r = 0; r < 32; r++) e_part[l] += e_sq[r * 16 + l];
      e_total += e_part[l];
    end
  end

  // ---------------- instruction timing ----------------
  int cyc_in_d = 0;
  int store_clocks [$];
  int n_ops = 0;
  always @(posedge clk) if (!rst) begin
    if (dut.u_fetch.running) begin
      cyc_in_d = cyc_in_d + 1;
      if (dut.increment_pipe) begin
        if (dut.u_fetch.d_dec.kind != K_CTRL) begin
          int rows, lanes, w, n;
          n_ops++;
          rows  = dut.u_fetch.d_dec.scale[2] ? 1 : int'(num_threads) / 16;
          lanes = (dut.u_fetch.d_dec.scale[1:0] == 0) ? 16 : (dut.u_fetch.d_dec.scale[1:0] == 1) ? 8 :
                  (dut.u_fetch.d_dec.scale[1:0] == 2) ? 4 : 1;
          w = (dut.u_fetch.d_dec.kind == K_LOAD) ? (lanes + 3) / 4 :
              (dut.u_fetch.d_dec.kind == K_SAVE) ? lanes : 1;
          n = w * rows;
          check($sformatf("clocks of instruction at pc %0d", dut.u_fetch.d_pc), 32'(cyc_in_d), 32'(n));
          if (dut.u_fetch.d_dec.kind == K_SAVE) store_clocks.push_back(cyc_in_d);
        end
        cyc_in_d = 0;
      end
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
    repeat (100000) @(posedge clk);
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
    for (int t = 0; t < 512; t++) host_write(t, x[t]);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    t_start = $time;
    wait (!busy);
    t_end = $time;
    $display("reduction of 512 elements ran %0d clocks (%0d instructions)", (t_end - t_start) / 2, n_prog);

    for (int t = 0; t < 512; t++) begin
      host_read(t, d); check($sformatf("square %0d", t), d, e_sq[t]);
    end
    for (int l = 0; l < 16; l++) begin
      host_read(PARTIAL + l, d); check($sformatf("partial %0d", l), d, e_part[l]);
    end
    host_read(TOTAL, d); check("total", d, e_total);
    $display("total = %0d, store clocks:", e_total);
    foreach (store_clocks[i]) $display("  store %0d: %0d clocks", i, store_clocks[i]);
    checks++;
    if (store_clocks.size() != 3) begin
      failures++; $display("FAIL expected 3 stores, saw %0d", store_clocks.size());
    end else begin
      check("full store clocks", 32'(store_clocks[0]), 32'd512);
      check("row store clocks", 32'(store_clocks[1]), 32'd16);
      check("single store clocks", 32'(store_clocks[2]), 32'd1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
