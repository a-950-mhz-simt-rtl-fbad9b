// instr_fetch: instruction fetch, decode and thread sequencer.
//
// Pipeline: PC -> address register -> instruction memory and instruction
// register -> decoder and decode stage register D. All these registers advance
// together on increment_pipe, so the instruction in D stays there for as many
// clocks as it issues thread slots (next_thread_block decides when it is done).
// Each stage carries the PC of its instruction (the address history needed for
// return addresses).
//
// Control flow is resolved in D by branch_unit. A taken branch loads the PC
// with the branch address (immediate or top of the return stack) and zeroes the
// address register, the instruction register and D, so the three following
// slots become one-clock NOPs. Call pushes pc+1 on call_stack; return pops it.
//
// Every clock in which D holds an operation, load or save, one slot (decoded
// controls, thread row, width position, lane mask) is issued through the
// control delay chain to the SPs and the shared memory; iss is the chain's
// output, DELAY clocks later.
//
// start (one clock, while idle) begins a program at address 0; STOP ends it,
// and busy falls once the last issued slot has left the delay chain. The
// instruction memory can be written through imem_* at any time.
// The stage structure, the zeroing on a taken branch, the stack and the
// delay chain follow the published fetch diagram; start/stop and the exact
// number of flushed slots are this design's.
module instr_fetch
  import egpu_pkg::*;
#(
  parameter int IMEM_DEPTH  = 1024,
  parameter int MAX_ROWS    = 32,
  parameter int DELAY       = 3,
  parameter int STACK_DEPTH = 8,
  localparam int IAW        = $clog2(IMEM_DEPTH)
) (
  input  logic           clk,
  input  logic           rst,
  input  logic           start,
  input  logic [12:0]    num_threads,
  input  logic           imem_we,
  input  logic [IAW-1:0] imem_waddr,
  input  logic [31:0]    imem_wdata,
  output issue_t         iss,
  output logic           busy,
  output logic           increment_pipe,
  output logic           branch_taken
);
  logic           running;
  logic [PCW-1:0] pc, a_pc, i_pc, d_pc;
  logic           a_valid, i_valid;
  logic [31:0]    i_word;
  dec_t           d_dec, dec_c;
  logic           d_single, single_c;

  // ---- instruction memory (between the address and instruction registers)
  imem #(.DEPTH(IMEM_DEPTH), .WIDTH(32)) u_imem (
    .clk, .en(increment_pipe), .raddr(a_pc[IAW-1:0]), .rdata(i_word),
    .we(imem_we), .waddr(imem_waddr), .wdata(imem_wdata));

  // ---- decode stage (combinational part)
  instr_decode u_dec (.instr(i_valid ? i_word : 32'd0), .dec(dec_c));

  // single-cycle instruction trap, one stage before D
  logic [4:0]      bs_wl, bs_pw;
  logic [ROWW-1:0] bs_dl, bs_pd;
  logic            bs_pok;
  logic [NSP-1:0]  bs_lm;
  block_sizes #(.MAX_ROWS(MAX_ROWS)) u_bs_single (
    .num_threads, .scale(dec_c.scale), .kind(dec_c.kind),
    .w_last(bs_wl), .d_last(bs_dl), .pre_w(bs_pw), .pre_d(bs_pd),
    .pre_ok(bs_pok), .single(single_c), .lane_mask(bs_lm));

  // ---- branch and stack, acting on D
  logic           taken, push, pop;
  logic [PCW-1:0] target, push_addr, stack_top;
  logic [15:0]    loop_count;
  logic           stack_empty;
  logic           fire;
  assign fire = increment_pipe && (d_dec.kind == K_CTRL);

  branch_unit u_br (
    .clk, .rst, .fire, .opc(d_dec.opc), .imm(d_dec.imm), .pc(d_pc),
    .stack_top, .taken, .target, .push, .pop, .push_addr, .loop_count);

  call_stack #(.DEPTH(STACK_DEPTH), .AW(PCW)) u_stack (
    .clk, .rst, .push, .pop, .din(push_addr), .top(stack_top), .empty(stack_empty));

  assign branch_taken = taken;

  // ---- pipeline control
  logic [ROWW-1:0] row;
  logic [3:0]      wid;
  logic [NSP-1:0]  lane_mask;
  next_thread_block #(.MAX_ROWS(MAX_ROWS)) u_ntb (
    .clk, .rst, .run(running), .num_threads, .scale(d_dec.scale),
    .op_instr(d_dec.kind == K_OP), .load_instr(d_dec.kind == K_LOAD),
    .save_instr(d_dec.kind == K_SAVE), .single_instr(d_single),
    .increment_pipe, .row, .wid, .lane_mask);

  // ---- fetch pipeline registers
  logic stop;
  assign stop = fire && d_dec.opc == OP_STOP;

  always_ff @(posedge clk) begin
    if (rst) begin
      running  <= 1'b0;
      pc       <= '0;
      a_pc     <= '0;
      i_pc     <= '0;
      d_pc     <= '0;
      a_valid  <= 1'b0;
      i_valid  <= 1'b0;
      d_dec    <= '0;
      d_single <= 1'b1;
    end else if (!running) begin
      if (start) begin
        running  <= 1'b1;
        pc       <= '0;
        a_valid  <= 1'b0;
        i_valid  <= 1'b0;
        d_dec    <= '0;
        d_single <= 1'b1;
      end
    end else if (increment_pipe) begin
      if (taken || stop) begin
        pc       <= target;
        a_valid  <= 1'b0;
        i_valid  <= 1'b0;
        d_dec    <= '0;
        d_single <= 1'b1;
        running  <= !stop;
      end else begin
        pc       <= pc + 1'b1;
        a_pc     <= pc;
        a_valid  <= 1'b1;
        i_pc     <= a_pc;
        i_valid  <= a_valid;
        d_pc     <= i_pc;
        d_dec    <= dec_c;
        d_single <= single_c;
      end
    end
  end

  // ---- issue into the control delay chain
  issue_t slot;
  always_comb begin
    slot           = '0;
    slot.valid     = running && (d_dec.kind != K_CTRL);
    slot.kind      = d_dec.kind;
    slot.rd        = d_dec.rd;
    slot.ra        = d_dec.ra;
    slot.rb        = d_dec.rb;
    slot.imm       = d_dec.imm;
    slot.use_mul   = d_dec.use_mul;
    slot.aop       = d_dec.aop;
    slot.mop       = d_dec.mop;
    slot.bsel_imm  = d_dec.bsel_imm;
    slot.bsel_tid  = d_dec.bsel_tid;
    slot.wr_rd     = d_dec.wr_rd;
    slot.row       = row;
    slot.wid       = wid;
    slot.lane_mask = lane_mask;
  end

  ctrl_delay_chain #(.STAGES(DELAY)) u_chain (.clk, .rst, .d(slot), .q(iss));

  // busy until the last slot has left the chain and been written back
  localparam int DRAIN = DELAY + 10;
  logic [$clog2(DRAIN+1)-1:0] drain;
  always_ff @(posedge clk) begin
    if (rst)          drain <= '0;
    else if (running) drain <= ($clog2(DRAIN+1))'(DRAIN);
    else if (drain != '0) drain <= drain - 1'b1;
  end
  assign busy = running || (drain != '0);

  // a taken branch or a stack operation only comes from a control instruction
  a_branch_ctrl: assert property (@(posedge clk) disable iff (rst)
    (taken || push || pop) |-> (fire && d_dec.kind == K_CTRL));

endmodule
