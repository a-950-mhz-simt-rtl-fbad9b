// sp: one scalar processor (SP) of the SM.
//
// Each clock the SP receives one issued slot: an instruction plus the thread
// row it applies to. It reads ra and rb of that row's thread from its register
// file, runs the soft-logic ALU and the multiplier/shifter side by side, and
// writes the selected result back to rd. For loads and stores it forms the
// address ra + imm[7:0] and offers it, with rb as store data, to the shared
// memory muxes; load data comes back from read port LANE % 4.
//
// Registers of thread row r, register n are at r*REGS_PER_THREAD + n.
// Operand B is rb, the sign-extended immediate (LDI) or the thread index
// row*16 + LANE (TID). A lane writes back only when it is in the slot's lane
// mask and, for a load, when the slot's read group is LANE / 4.
//
// Timing (clock 0 = slot at iss): register read in clock 1, address and store
// data to the shared memory in clock 2, load data from it in clock 4, and every
// result - ALU, multiplier or load - is written at the end of clock WB = 8, so
// writebacks never collide. There is no interlock: an instruction reading a
// register written by the previous one must start at least WB+1 clocks after
// that instruction started on the same row, which holds whenever the previous
// instruction ran for 9 clocks or more (for instance 144 threads or more for an
// operation); otherwise NOPs must be placed between them. The SP contents
// (register file, logic ALU, multiplier/shifter) follow the published design;
// the fixed writeback point, the address adder and the operand sources are
// this design's. Only the valid bits of the slot pipeline are reset; the
// datapath registers have no reset, as in the published design, which leaves
// registers without reset wherever it can.
module sp
  import egpu_pkg::*;
#(
  parameter int LANE            = 0,
  parameter int REGS_PER_THREAD = 32,
  parameter int MAX_ROWS        = 32,
  localparam int DEPTH          = REGS_PER_THREAD * MAX_ROWS,
  localparam int AW             = $clog2(DEPTH),
  localparam int RW             = $clog2(MAX_ROWS) < 1 ? 1 : $clog2(MAX_ROWS),
  localparam int NW             = $clog2(REGS_PER_THREAD)
) (
  input  logic            clk,
  input  logic            rst,
  input  issue_t          iss,
  output logic [XLEN-1:0] sm_addr,
  output logic [XLEN-1:0] sm_wdata,
  input  logic [XLEN-1:0] sm_rdata
);
  localparam int ALU_LAT = 7;
  localparam int WB      = 1 + ALU_LAT;   // writeback clock
  localparam int SM_RET  = 4;             // clock the load data arrives

  function automatic logic [AW-1:0] raddr(input logic [ROWW-1:0] r, input logic [4:0] n);
    return AW'({r[RW-1:0], n[NW-1:0]});
  endfunction

  // issued slot through the SP pipeline; p[k] is the slot in clock k
  issue_t p [WB+1];
  assign p[0] = iss;
  for (genvar k = 0; k < WB; k++) begin : g_pipe
    always_ff @(posedge clk) begin
      p[k+1] <= p[k];
      if (rst) p[k+1].valid <= 1'b0;
    end
  end

  // clock 0 -> 1: register read
  logic [XLEN-1:0] rd_a, rd_b;
  logic            we;
  logic [AW-1:0]   wa;
  logic [XLEN-1:0] wd;
  regfile #(.DEPTH(DEPTH), .WIDTH(XLEN)) u_rf (
    .clk,
    .ra0(raddr(iss.row, iss.ra)), .ra1(raddr(iss.row, iss.rb)),
    .rd0(rd_a), .rd1(rd_b),
    .we, .wa, .wd);

  // clock 1: operands into the two units
  logic [XLEN-1:0] opb;
  always_comb begin
    if (p[1].bsel_imm)      opb = {{16{p[1].imm[15]}}, p[1].imm};
    else if (p[1].bsel_tid) opb = XLEN'(p[1].row) * XLEN'(NSP) + XLEN'(LANE);
    else                    opb = rd_b;
  end

  logic [XLEN-1:0] alu_y, mul_y;
  logic_alu #(.LATENCY(ALU_LAT)) u_alu (
    .clk, .a(rd_a), .b(opb), .op(p[1].aop), .y(alu_y));
  int_mul_shift u_mul (
    .clk, .aa(rd_a), .bb(opb), .op(p[1].mop), .cc(mul_y));

  // clock 2: shared memory address and store data
  always_ff @(posedge clk) begin
    sm_addr  <= rd_a + {24'd0, p[1].imm[7:0]};
    sm_wdata <= rd_b;
  end

  // clock 4 -> WB: load data delayed to the common writeback point
  logic [XLEN-1:0] ld [SM_RET:WB];
  assign ld[SM_RET] = sm_rdata;
  for (genvar k = SM_RET; k < WB; k++) begin : g_ld
    always_ff @(posedge clk) ld[k+1] <= ld[k];
  end

  // clock WB: writeback
  logic lane_on;
  always_comb begin
    lane_on = p[WB].lane_mask[LANE];
    if (p[WB].kind == K_LOAD) lane_on = lane_on && (int'(p[WB].wid) == LANE / NRD);
    we = p[WB].valid && p[WB].wr_rd && lane_on;
    wa = raddr(p[WB].row, p[WB].rd);
    if (p[WB].kind == K_LOAD) wd = ld[WB];
    else if (p[WB].use_mul)   wd = mul_y;
    else                      wd = alu_y;
  end

endmodule
