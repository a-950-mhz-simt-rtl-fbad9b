// next_thread_block: pipeline control of the instruction unit.
//
// Decides when the current instruction (held in the decode stage register) has
// issued all its threads and the fetch pipeline may advance (increment_pipe),
// and gives the thread row and width position issued in each clock.
//
// There is one counter set per instruction class, each with its own
// block_sizes: an operation counts rows only (depth_count); a load and a save
// count the width position (width_count), and the row counter advances when the
// width counter wraps. Each set compares its counters with the values one clock
// before the end of the instruction; the OR of the three compares, each gated
// by its class, is registered, and that register ORed with the single-cycle
// flag (an instruction of one clock, decided in the decode stage) is
// increment_pipe. Counters clear whenever their class is not executing or the
// pipe advances, so every instruction starts at row 0, width 0.
//
// Timing: an instruction of N = W*D clocks holds the pipe for exactly N clocks;
// increment_pipe is high in its last clock. The counter/compare/register
// structure follows the published pipeline-control diagram; the clearing of
// the counters is this design's reading of it.
module next_thread_block
  import egpu_pkg::*;
#(
  parameter int MAX_ROWS = 32
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            run,
  input  logic [12:0]     num_threads,
  input  logic [2:0]      scale,
  input  logic            op_instr,
  input  logic            load_instr,
  input  logic            save_instr,
  input  logic            single_instr,
  output logic            increment_pipe,
  output logic [ROWW-1:0] row,
  output logic [3:0]      wid,
  output logic [NSP-1:0]  lane_mask
);
  // block sizes of the three classes
  logic [4:0]      wl [3], pw [3];
  logic [ROWW-1:0] dl [3], pd [3];
  logic            pok [3], sgl [3];
  logic [NSP-1:0]  lm [3];
  kind_e           kinds [3];
  assign kinds[0] = K_OP;
  assign kinds[1] = K_LOAD;
  assign kinds[2] = K_SAVE;

  for (genvar k = 0; k < 3; k++) begin : g_bs
    block_sizes #(.MAX_ROWS(MAX_ROWS)) u_bs (
      .num_threads, .scale, .kind(kinds[k]),
      .w_last(wl[k]), .d_last(dl[k]), .pre_w(pw[k]), .pre_d(pd[k]),
      .pre_ok(pok[k]), .single(sgl[k]), .lane_mask(lm[k]));
  end

  logic [2:0]      act;
  logic [4:0]      wc [3];   // width_count (unused for operations)
  logic [ROWW-1:0] dc [3];   // depth_count
  logic [2:0]      eq;
  logic            end_q;

  assign act = {save_instr, load_instr, op_instr} & {3{run & ~single_instr}};

  always_comb begin
    for (int k = 0; k < 3; k++)
      eq[k] = act[k] && pok[k] && (dc[k] == pd[k]) && (k == 0 || wc[k] == pw[k]);
  end

  always_ff @(posedge clk) begin
    for (int k = 0; k < 3; k++) begin
      if (rst || !act[k] || increment_pipe) begin
        wc[k] <= '0;
        dc[k] <= '0;
      end else if (k == 0) begin
        dc[k] <= dc[k] + 1'b1;
      end else if (wc[k] == wl[k]) begin
        wc[k] <= '0;
        dc[k] <= dc[k] + 1'b1;
      end else begin
        wc[k] <= wc[k] + 1'b1;
      end
    end
    if (rst) end_q <= 1'b0;
    else     end_q <= (|eq) && !increment_pipe;
  end

  assign increment_pipe = run && (end_q || single_instr);

  // at most one instruction class at a time, and the pipe only moves while running
  a_one_class: assert property (@(posedge clk) disable iff (rst) $onehot0({op_instr, load_instr, save_instr}));
  a_run_only:  assert property (@(posedge clk) disable iff (rst) increment_pipe |-> run);

  always_comb begin
    row       = '0;
    wid       = '0;
    lane_mask = lm[0];
    if (load_instr) begin
      row = dc[1]; wid = wc[1][3:0]; lane_mask = lm[1];
    end else if (save_instr) begin
      row = dc[2]; wid = wc[2][3:0]; lane_mask = lm[2];
    end else begin
      row = dc[0];
    end
  end
endmodule
