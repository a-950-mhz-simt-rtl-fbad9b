// tb_sp: one SP (lane 5) receiving isolated issue slots of random
// instructions on random rows. Register results are read back from the
// register file after the writeback clock (clock 8 after the slot), store
// address/data are checked on the shared-memory side in clock 2, and load
// data are served by a model memory with the shared memory's latency. The lane
// mask and, for loads, the read group decide whether the lane writes.
module tb_sp;
  import egpu_pkg::*;
  logic clk = 0;
  always #1 clk = ~clk;
  logic rst;
  issue_t iss;
  logic [31:0] sm_addr, sm_wdata, sm_rdata, rdq;
  sp #(.LANE(5)) dut (.*);
  int checks = 0, failures = 0;
  logic [31:0] rf [32][32];
  int n_wr = 0, n_masked = 0;

  function automatic logic [31:0] memval(logic [31:0] a);
    return a * 32'h0101_0101 ^ 32'h5A5A_0000;
  endfunction
  always_ff @(posedge clk) begin
    rdq <= memval(sm_addr);
    sm_rdata <= rdq;
  end

  function automatic logic [31:0] model(issue_t s, logic [31:0] a, logic [31:0] b);
    logic signed [63:0] ps;
    logic [63:0] pu;
    ps = $signed({{32{a[31]}}, a}) * $signed({{32{b[31]}}, b});
    pu = {32'd0, a} * {32'd0, b};
    if (s.use_mul) case (s.mop)
      M_LO_U: return pu[31:0];
      M_LO_S: return ps[31:0];
      M_HI_U: return pu[63:32];
      M_HI_S: return ps[63:32];
      M_LSL:  return (b > 31) ? 32'd0 : a << b[4:0];
      M_LSR:  return (b > 31) ? 32'd0 : a >> b[4:0];
      default: return (b > 31) ? {32{a[31]}} : 32'($signed(a) >>> b[4:0]);
    endcase
    case (s.aop)
      A_AND:  return a & b;
      A_OR:   return a | b;
      A_XOR:  return a ^ b;
      A_NOT:  return ~a;
      A_CNOT: return (a == 0) ? 32'd1 : 32'd0;
      A_ADD:  return a + b;
      A_SUB:  return a - b;
      A_ABS:  return a[31] ? -a : a;
      A_PASSA: return a;
      default: return b;
    endcase
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic slot(issue_t s);
    @(negedge clk); iss = s;
    @(negedge clk); iss.valid = 0;
  endtask

  initial begin
    rst = 1; iss = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    // initialise all registers with LDI
    for (int r = 0; r < 32; r++) for (int n = 0; n < 32; n++) begin
      issue_t s;
      s = '0; s.valid = 1; s.kind = K_OP; s.aop = A_PASSB; s.bsel_imm = 1; s.wr_rd = 1;
      s.rd = 5'(n); s.row = 8'(r); s.imm = $urandom; s.lane_mask = 16'hFFFF;
      rf[r][n] = {{16{s.imm[15]}}, s.imm};
      slot(s);
    end
    repeat (10) @(negedge clk);
    for (int i = 0; i < 3000; i++) begin
      issue_t s;
      logic [31:0] a, b, e;
      int t;
      bit wr;
      s = '0; s.valid = 1;
      s.row = 8'($urandom_range(0, 31)); s.rd = $urandom; s.ra = $urandom; s.rb = $urandom;
      s.imm = $urandom; s.lane_mask = ($urandom_range(0, 3) == 0) ? 16'h001F : 16'hFFFF;
      s.wid = 4'($urandom_range(0, 3));
      t = $urandom_range(0, 5);
      a = rf[s.row][s.ra]; b = rf[s.row][s.rb];
      s.kind = K_OP; s.wr_rd = 1;
      case (t)
        0, 1: begin s.aop = alu_op_e'($urandom_range(0, 9)); if (s.aop == A_PASSB) s.bsel_imm = $urandom; end
        2:    begin s.use_mul = 1; s.mop = mul_op_e'($urandom_range(0, 6));
                    if (s.mop inside {M_LSL, M_LSR, M_ASR}) begin s.bsel_imm = 1; s.imm = 16'($urandom_range(0, 40)); end end
        3:    begin s.aop = A_PASSB; s.bsel_tid = 1; end
        4:    s.kind = K_LOAD;
        default: begin s.kind = K_SAVE; s.wr_rd = 0; end
      endcase
      if (s.bsel_imm) b = {{16{s.imm[15]}}, s.imm};
      if (s.bsel_tid) b = 32'(s.row) * 16 + 5;
      e = (s.kind == K_LOAD) ? memval(a + {24'd0, s.imm[7:0]}) : model(s, a, b);
      wr = s.wr_rd && s.lane_mask[5] && (s.kind != K_LOAD || s.wid == 1);
      slot(s);              // clock 0, 1
      @(negedge clk);       // clock 2
      if (s.kind == K_SAVE) begin
        checks++;
        if (sm_addr !== a + {24'd0, s.imm[7:0]} || sm_wdata !== b) begin
          failures++; if (failures < 10) $display("FAIL store i=%0d", i);
        end
      end
      repeat (7) @(negedge clk);
      if (wr) begin rf[s.row][s.rd] = e; n_wr++; end else n_masked++;
      checks++;
      if (dut.u_rf.bank0[{s.row[4:0], s.rd}] !== rf[s.row][s.rd]) begin
        failures++;
        if (failures < 10) $display("FAIL i=%0d t=%0d got %h exp %h", i, t, dut.u_rf.bank0[{s.row[4:0], s.rd}], rf[s.row][s.rd]);
      end
    end
    checks++;
    if (n_wr == 0 || n_masked == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
