// regfile: register file of one scalar processor.
//
// DEPTH 32-bit registers with two read ports and one write port, built as two
// copies of a simple dual-port memory (one copy per read port, both written
// together), the way two block RAMs per copy hold 1K x 32 on the target FPGA.
// Reads are synchronous: rd0/rd1 show the word at ra0/ra1 one clock after the
// address. A read of the address being written in the same clock returns the
// old word. Contents are not reset; programs write a register before reading
// it. The two-copy organisation is this design's reading of the memory count
// per SP given for the published processor.
module regfile #(
  parameter int DEPTH = 1024,
  parameter int WIDTH = 32,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic [AW-1:0]    ra0,
  input  logic [AW-1:0]    ra1,
  output logic [WIDTH-1:0] rd0,
  output logic [WIDTH-1:0] rd1,
  input  logic             we,
  input  logic [AW-1:0]    wa,
  input  logic [WIDTH-1:0] wd
);
  logic [WIDTH-1:0] bank0 [DEPTH];
  logic [WIDTH-1:0] bank1 [DEPTH];

  always_ff @(posedge clk) begin
    if (we) begin
      bank0[wa] <= wd;
      bank1[wa] <= wd;
    end
    rd0 <= bank0[ra0];
    rd1 <= bank1[ra1];
  end
endmodule
