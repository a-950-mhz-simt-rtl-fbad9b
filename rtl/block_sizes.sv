// block_sizes: thread block size of one instruction, for the pipeline control.
//
// From the program's thread count and the instruction's dynamic thread scale it
// gives the block width W (clocks per row) and depth D (rows), as the last
// values of the width and depth counters (w_last = W-1, d_last = D-1), and the
// counter values one clock before the end of the instruction (pre_w, pre_d),
// because the end-of-instruction signal is registered. pre_ok is low when the
// instruction has a single clock (W*D = 1); that case is flagged by single.
//
//   operation : W = 1              (one row of all SPs per clock)
//   load      : W = ceil(SPs / 4)  (four read ports)
//   save      : W = SPs            (one write port)
//   control   : single clock
//
// Active SPs are 16/8/4/1 for scale[1:0] = 0/1/2/3; scale[2] limits the block
// to its first row. The thread count is taken in multiples of 16, at least one
// row and at most MAX_ROWS rows. Purely combinational. The width/depth split
// and the one-clock-early compare follow the published design; the scale
// encoding and the clamping are this design's.
module block_sizes
  import egpu_pkg::*;
#(
  parameter int MAX_ROWS = 32
) (
  input  logic [12:0]     num_threads,
  input  logic [2:0]      scale,
  input  kind_e           kind,
  output logic [4:0]      w_last,
  output logic [ROWW-1:0] d_last,
  output logic [4:0]      pre_w,
  output logic [ROWW-1:0] pre_d,
  output logic            pre_ok,
  output logic            single,
  output logic [NSP-1:0]  lane_mask
);
  logic [8:0] rows_full;
  logic [8:0] depth;
  logic [4:0] lanes, width;

  always_comb begin
    rows_full = num_threads[12:4];
    if (rows_full == 9'd0) rows_full = 9'd1;
    if (int'(rows_full) > MAX_ROWS) rows_full = 9'(MAX_ROWS);
    depth = scale[2] ? 9'd1 : rows_full;

    unique case (scale[1:0])
      2'd0: lanes = 5'd16;
      2'd1: lanes = 5'd8;
      2'd2: lanes = 5'd4;
      default: lanes = 5'd1;
    endcase
    lane_mask = NSP'((32'd1 << lanes) - 32'd1);

    unique case (kind)
      K_LOAD:  width = (lanes + 5'(NRD - 1)) / 5'(NRD);
      K_SAVE:  width = lanes;
      default: width = 5'd1;
    endcase

    w_last = width - 5'd1;
    d_last = ROWW'(depth - 9'd1);
    if (width >= 5'd2) begin
      pre_w  = width - 5'd2;
      pre_d  = ROWW'(depth - 9'd1);
      pre_ok = 1'b1;
    end else begin
      pre_w  = 5'd0;
      pre_d  = ROWW'(depth - 9'd2);
      pre_ok = (depth >= 9'd2);
    end
    single = (kind == K_CTRL) || (width == 5'd1 && depth == 9'd1);
  end
endmodule
