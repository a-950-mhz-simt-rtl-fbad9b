// dsp_block: function of one hard FPGA DSP Block as the multiplier uses it.
//
// Two signed 19x18 multipliers. With MODE_SUM = 0 they are independent and the
// block returns both products (r0 = ax*ay, r1 = bx*by); with MODE_SUM = 1 it
// returns their sum on r0 (r1 is then unused and held at zero). Results are
// 37 bits wide.
//
// Timing: three register stages - input, one internal stage and output - so a
// result appears three clocks after its operands. The three stages follow the
// published description of the block; which operand is 19 and which 18 bits
// wide, and the zero on r1 in sum mode, are this model's choices. On an FPGA
// this module is mapped to the vendor's DSP primitive.
module dsp_block #(
  parameter bit MODE_SUM = 1'b0
) (
  input  logic               clk,
  input  logic signed [18:0] ax,
  input  logic signed [17:0] ay,
  input  logic signed [18:0] bx,
  input  logic signed [17:0] by,
  output logic signed [36:0] r0,
  output logic signed [36:0] r1
);
  logic signed [18:0] ax_q, bx_q;
  logic signed [17:0] ay_q, by_q;
  logic signed [36:0] p0_q, p1_q;

  always_ff @(posedge clk) begin
    // input stage
    ax_q <= ax;  ay_q <= ay;
    bx_q <= bx;  by_q <= by;
    // internal stage: the two products
    p0_q <= 37'(ax_q * ay_q);
    p1_q <= 37'(bx_q * by_q);
    // output stage: independent products or their sum
    if (MODE_SUM) begin
      r0 <= p0_q + p1_q;
      r1 <= '0;
    end else begin
      r0 <= p0_q;
      r1 <= p1_q;
    end
  end
endmodule
