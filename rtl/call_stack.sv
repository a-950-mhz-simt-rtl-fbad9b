// call_stack: return-address stack of the instruction fetch unit.
//
// A chain of DEPTH registers: push shifts every entry down one place and
// loads din on top; pop shifts every entry up (the bottom entry fills with
// zero). top is the current top entry, used as the branch address of a
// return. Pushing onto a full stack loses the bottom entry; popping an empty
// stack returns zero. The register chain follows the published fetch diagram;
// depth and the over/underflow behaviour are this design's.
module call_stack #(
  parameter int DEPTH = 8,
  parameter int AW    = 10
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          push,
  input  logic          pop,
  input  logic [AW-1:0] din,
  output logic [AW-1:0] top,
  output logic          empty
);
  logic [AW-1:0] st [DEPTH];
  logic [$clog2(DEPTH+1)-1:0] cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < DEPTH; i++) st[i] <= '0;
      cnt <= '0;
    end else if (push) begin
      st[0] <= din;
      for (int i = 1; i < DEPTH; i++) st[i] <= st[i-1];
      if (int'(cnt) < DEPTH) cnt <= cnt + 1'b1;
    end else if (pop) begin
      for (int i = 0; i < DEPTH - 1; i++) st[i] <= st[i+1];
      st[DEPTH-1] <= '0;
      if (cnt != '0) cnt <= cnt - 1'b1;
    end
  end

  assign top   = st[0];
  assign empty = (cnt == '0);
endmodule
