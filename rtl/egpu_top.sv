// egpu_top: one SIMT streaming multiprocessor.
//
// The instruction unit (instr_fetch) fetches and decodes the program and, for
// every instruction, issues one slot per clock - a thread row, and for loads
// and stores a width position - through its control delay chain. All 16 SPs
// execute each slot in lockstep on their own thread of that row. The SPs share
// a 4-read/1-write memory: a load of a full row takes four clocks (four SPs per
// clock through the 16:4 read address mux), a store sixteen clocks (one SP per
// clock through the 16:1 write address and data muxes). Dynamic thread scaling
// lets an instruction use fewer SPs or only the first row, which shortens it.
//
// The shared memory controls are taken from the slot leaving the delay chain,
// delayed two clocks to line up with the SP address outputs.
//
// Host side: the program is written through imem_*; num_threads is the thread
// count of the program (a multiple of 16, at most MAX_THREADS); a one-clock
// start runs it from address 0; busy stays high until it has stopped and all
// results are written. While busy is low the host may write the shared memory
// (host_we, host_addr, host_wdata, one word per clock) and read it (host_addr
// to host_rdata in two clocks) through the memory's write port and read port 0.
// This host access is this design's; the published design does not describe
// how data enter and leave the shared memory.
//
// Default sizes: 16 SPs, 512 threads of 32 registers (16K registers in all),
// 16 KB (4096 words) of shared memory, 1024 instructions.
module egpu_top
  import egpu_pkg::*;
#(
  parameter int MAX_THREADS     = 512,
  parameter int REGS_PER_THREAD = 32,
  parameter int SMEM_WORDS      = 4096,
  parameter int IMEM_DEPTH      = 1024,
  parameter int DELAY           = 3,
  localparam int MAX_ROWS       = MAX_THREADS / NSP,
  localparam int IAW            = $clog2(IMEM_DEPTH),
  localparam int SAW            = $clog2(SMEM_WORDS),
  localparam int GW             = $clog2(NSP / NRD)
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            start,
  input  logic [12:0]     num_threads,
  output logic            busy,
  input  logic            imem_we,
  input  logic [IAW-1:0]  imem_waddr,
  input  logic [31:0]     imem_wdata,
  input  logic            host_we,
  input  logic [SAW-1:0]  host_addr,
  input  logic [XLEN-1:0] host_wdata,
  output logic [XLEN-1:0] host_rdata
);
  issue_t iss;
  logic   increment_pipe, branch_taken;

  instr_fetch #(
    .IMEM_DEPTH(IMEM_DEPTH), .MAX_ROWS(MAX_ROWS), .DELAY(DELAY)
  ) u_fetch (
    .clk, .rst, .start, .num_threads,
    .imem_we, .imem_waddr, .imem_wdata,
    .iss, .busy, .increment_pipe, .branch_taken);

  // ---- scalar processors
  logic [XLEN-1:0] sp_addr  [NSP];
  logic [XLEN-1:0] sp_wdata [NSP];
  logic [XLEN-1:0] sm_rdata [NRD];

  for (genvar l = 0; l < NSP; l++) begin : g_sp
    sp #(.LANE(l), .REGS_PER_THREAD(REGS_PER_THREAD), .MAX_ROWS(MAX_ROWS)) u_sp (
      .clk, .rst, .iss,
      .sm_addr(sp_addr[l]), .sm_wdata(sp_wdata[l]), .sm_rdata(sm_rdata[l % NRD]));
  end

  // ---- shared memory controls, aligned with the SP address outputs (clock 2)
  issue_t s1, s2;
  always_ff @(posedge clk) begin
    s1 <= iss;
    s2 <= s1;
    if (rst) begin
      s1.valid <= 1'b0;
      s2.valid <= 1'b0;
    end
  end

  logic [XLEN-1:0] m_addr  [NSP];
  logic [XLEN-1:0] m_wdata [NSP];
  logic            m_rd_en, m_wr_en;
  logic [GW-1:0]   m_rd_grp;
  logic [3:0]      m_wr_lane;

  always_comb begin
    m_addr    = sp_addr;
    m_wdata   = sp_wdata;
    m_rd_en   = s2.valid && s2.kind == K_LOAD;
    m_rd_grp  = s2.wid[GW-1:0];
    m_wr_en   = s2.valid && s2.kind == K_SAVE && s2.lane_mask[s2.wid];
    m_wr_lane = s2.wid;
    if (!busy) begin
      // host access through SP 0's mux inputs
      m_addr[0]  = XLEN'(host_addr);
      m_wdata[0] = host_wdata;
      m_rd_en    = 1'b1;
      m_rd_grp   = '0;
      m_wr_en    = host_we;
      m_wr_lane  = '0;
    end
  end

  logic          sm_rvalid;
  logic [GW-1:0] sm_rgrp;
  shared_mem #(.WORDS(SMEM_WORDS)) u_smem (
    .clk, .addr(m_addr), .wdata(m_wdata),
    .rd_en(m_rd_en), .rd_grp(m_rd_grp), .wr_en(m_wr_en), .wr_lane(m_wr_lane),
    .rdata(sm_rdata), .rvalid(sm_rvalid), .rgrp(sm_rgrp));

  assign host_rdata = sm_rdata[0];

  // a program starts with a whole number of rows that the register files hold
  a_threads: assert property (@(posedge clk) disable iff (rst)
    (start && !busy) |-> (num_threads[3:0] == 4'd0 && num_threads != 13'd0 &&
                          int'(num_threads) <= MAX_THREADS));
  // a store slot only addresses an active SP
  a_store_lane: assert property (@(posedge clk) disable iff (rst)
    (s2.valid && s2.kind == K_SAVE) |-> s2.lane_mask[s2.wid]);

endmodule
