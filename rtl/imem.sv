// imem: instruction memory of the fetch pipeline.
//
// DEPTH x WIDTH words. The read side sits between the fetch address register
// and the instruction register of the fetch pipeline, so its output register is
// clocked only when the pipeline advances (en = increment_pipe): rdata shows the
// word at raddr one enabled clock later and then holds. A separate write port
// lets a host reload the program. Size and the write port's form are this
// design's choice; the published design only says the memory is re-loadable.
module imem #(
  parameter int DEPTH = 1024,
  parameter int WIDTH = 32,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             en,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (en) rdata <= mem[raddr];
  end
endmodule
