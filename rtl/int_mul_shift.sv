// int_mul_shift: 32-bit integer multiplier with integrated left, logical right
// and arithmetic right shifts.
//
// How it works. The operands are treated as 33-bit signed numbers, so one
// datapath serves signed and unsigned multiplies. Each is split into 16-bit
// halves {AH,AL} and {BH,BL}; the low halves are always zero-extended, the high
// halves are sign-extended for signed and zero-extended for unsigned products.
// One DSP Block forms A = AH*BH and C = AL*BL, a second forms B = AH*BL + AL*BH.
// The 64-bit product is {A[33:0],C[31:0]} + sext({B,16'b0}). That 66-bit add is
// split into 16-bit segments: bits [15:0] are C[15:0]; segment [31:16] has no
// carry-in; segments [47:32] and [63:48] are added independently in the first
// adder row and get their carries in the second row, using the generate bit of
// segment [47:32] and a propagate bit P = AND over bits of (x|y).
//
// Shifts reuse the multiplier: BB becomes a one-hot value (all zeros above 31),
// so AA * onehot is a left shift. A logical right shift bit-reverses AA before
// and the low product half after the multiply. An arithmetic right shift of a
// negative value also ORs in a bit-reversed unary mask of the shift amount,
// giving the sign fill.
//
// Interface: aa, bb and op are sampled every clock; cc is the result exactly
// LATENCY = 7 clocks later (input register, DSP input, DSP internal, DSP output,
// two adder rows, output register). mul high/low, the one-hot/unary/bit-reverse
// shift scheme and the segmented carry logic follow the published design. This
// design's own choices: the op encoding, and an out-of-range flag carried next
// to the 5-bit shift amount so an arithmetic shift by more than 31 fills with
// the sign (the published text only forwards the 5-bit amount).
module int_mul_shift
  import egpu_pkg::*;
(
  input  logic        clk,
  input  logic [31:0] aa,
  input  logic [31:0] bb,
  input  mul_op_e     op,
  output logic [31:0] cc
);
  localparam int LATENCY = 7;

  function automatic logic [31:0] rvs(input logic [31:0] x);
    for (int i = 0; i < 32; i++) rvs[i] = x[31-i];
  endfunction

  typedef struct packed {
    mul_op_e    op;
    logic       msb;   // sign of AA for the arithmetic shift fill
    logic [4:0] amt;   // shift amount
    logic       oor;   // shift amount above 31
  } ctl_t;

  // ---- stage 0: input registers ----
  logic [31:0] aa0, bb0;
  mul_op_e     op0;
  always_ff @(posedge clk) begin
    aa0 <= aa;
    bb0 <= bb;
    op0 <= op;
  end

  logic is_shift0, is_rshift0, signed0;
  logic [31:0] a_sel, b_sel, onehot;
  always_comb begin
    is_shift0  = (op0 == M_LSL) || (op0 == M_LSR) || (op0 == M_ASR);
    is_rshift0 = (op0 == M_LSR) || (op0 == M_ASR);
    signed0    = (op0 == M_LO_S) || (op0 == M_HI_S);
    onehot     = (bb0[31:5] == '0) ? (32'd1 << bb0[4:0]) : 32'd0;
    a_sel      = is_rshift0 ? rvs(aa0) : aa0;
    b_sel      = is_shift0  ? onehot   : bb0;
  end

  // Operands into the 18x19 multipliers, data in the 16 LSBs.
  logic signed [18:0] ah, al;
  logic signed [17:0] bh, bl;
  always_comb begin
    ah = signed0 ? {{3{a_sel[31]}}, a_sel[31:16]} : {3'b000, a_sel[31:16]};
    al = {3'b000, a_sel[15:0]};
    bh = signed0 ? {{2{b_sel[31]}}, b_sel[31:16]} : {2'b00, b_sel[31:16]};
    bl = {2'b00, b_sel[15:0]};
  end

  ctl_t c0, c1, c2, c3;
  assign c0 = '{op: op0, msb: aa0[31], amt: bb0[4:0], oor: (bb0[31:5] != '0)};

  // ---- stages 1..3: the two DSP Blocks ----
  logic signed [36:0] vec_a, vec_c, vec_b, unused_r1;
  dsp_block #(.MODE_SUM(1'b0)) u_dsp_hh_ll (
    .clk, .ax(ah), .ay(bh), .bx(al), .by(bl), .r0(vec_a), .r1(vec_c));
  dsp_block #(.MODE_SUM(1'b1)) u_dsp_cross (
    .clk, .ax(ah), .ay(bl), .bx(al), .by(bh), .r0(vec_b), .r1(unused_r1));

  always_ff @(posedge clk) begin
    c1 <= c0;
    c2 <= c1;
    c3 <= c2;
  end

  // ---- stage 4: first adder row ----
  logic [65:0] v1, v2;
  logic [31:0] unary, unary_rvs;
  always_comb begin
    v1        = {vec_a[33:0], vec_c[31:0]};
    v2        = {{13{vec_b[36]}}, vec_b, 16'h0000};
    unary     = c3.oor ? 32'hFFFF_FFFF : ((32'd1 << c3.amt) - 32'd1);
    unary_rvs = rvs(unary);
  end

  logic [15:0] lo16_4;
  logic [16:0] s1_4, s2_4;  // sum with carry out
  logic [15:0] s3_4;
  logic        p2_4;
  logic [31:0] unary_rvs4;
  ctl_t        c4;
  always_ff @(posedge clk) begin
    lo16_4     <= v1[15:0];
    s1_4       <= {1'b0, v1[31:16]} + {1'b0, v2[31:16]};
    s2_4       <= {1'b0, v1[47:32]} + {1'b0, v2[47:32]};
    s3_4       <= v1[63:48] + v2[63:48];
    p2_4       <= &(v1[47:32] | v2[47:32]);
    unary_rvs4 <= unary_rvs;
    c4         <= c3;
  end

  // ---- stage 5: carries, second adder row, shift result ----
  logic        c32, c48;
  logic [31:0] lo32, lo_rvs, shift_res;
  always_comb begin
    c32    = s1_4[16];
    c48    = s2_4[16] | (p2_4 & c32);
    lo32   = {s1_4[15:0], lo16_4};
    lo_rvs = rvs(lo32);
    unique case (c4.op)
      M_LSR:   shift_res = lo_rvs;
      M_ASR:   shift_res = lo_rvs | (c4.msb ? unary_rvs4 : 32'd0);
      default: shift_res = lo32;
    endcase
  end

  logic [31:0] hi5, lo5;
  ctl_t        c5;
  always_ff @(posedge clk) begin
    hi5 <= {s3_4 + 16'(c48), s2_4[15:0] + 16'(c32)};
    lo5 <= shift_res;
    c5  <= c4;
  end

  // ---- stage 6: output select ----
  always_ff @(posedge clk) begin
    cc <= (c5.op == M_HI_U || c5.op == M_HI_S) ? hi5 : lo5;
  end

endmodule
