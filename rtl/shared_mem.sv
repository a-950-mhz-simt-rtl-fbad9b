// shared_mem: multi-port shared memory of the SM with its SP multiplexers.
//
// Four read ports and one write port (4R-1W) instead of a banked memory, so no
// bank arbitration is needed. Each SP offers an address and store data every
// clock. In a load slot for read group g, the 16:4 read address mux connects
// SPs 4g..4g+3 to read ports 0..3, so a full row of 16 SPs is read in four
// clocks. In a store slot the 16:1 write address and write data muxes pick one
// SP (wr_lane), so a row is written in 16 clocks.
//
// The memory is four copies of a WORDS x 32 simple dual-port array, all written
// together, each read by one port. Addresses are word addresses; the upper bits
// beyond log2(WORDS) are ignored.
//
// Timing: mux outputs are registered (clock 1), the array read is registered
// (clock 2): rdata[j], rvalid and rgrp appear two clocks after rd_en. A store
// is written at the end of clock 1, so a load issued one clock or more after a
// store to the same word sees the new value. The 4R-1W structure and the muxes
// follow the published design; the grouping of SPs on read ports, the latency
// and the word addressing are this design's.
module shared_mem
  import egpu_pkg::*;
#(
  parameter int WORDS = 4096,
  localparam int AW   = $clog2(WORDS),
  localparam int GW   = $clog2(NSP / NRD)
) (
  input  logic            clk,
  input  logic [XLEN-1:0] addr  [NSP],
  input  logic [XLEN-1:0] wdata [NSP],
  input  logic            rd_en,
  input  logic [GW-1:0]   rd_grp,
  input  logic            wr_en,
  input  logic [3:0]      wr_lane,
  output logic [XLEN-1:0] rdata [NRD],
  output logic            rvalid,
  output logic [GW-1:0]   rgrp
);
  // clock 1: read address mux (16:4), write address and data muxes (16:1)
  logic [AW-1:0]   ra_q [NRD];
  logic            rv_q;
  logic [GW-1:0]   rg_q;
  logic [AW-1:0]   wa_q;
  logic [XLEN-1:0] wd_q;
  logic            we_q;

  always_ff @(posedge clk) begin
    for (int j = 0; j < NRD; j++) ra_q[j] <= addr[int'(rd_grp) * NRD + j][AW-1:0];
    rv_q <= rd_en;
    rg_q <= rd_grp;
    wa_q <= addr[wr_lane][AW-1:0];
    wd_q <= wdata[wr_lane];
    we_q <= wr_en;
  end

  // clock 2: the memory copies
  for (genvar j = 0; j < NRD; j++) begin : g_copy
    logic [XLEN-1:0] mem [WORDS];
    always_ff @(posedge clk) begin
      if (we_q) mem[wa_q] <= wd_q;
      rdata[j] <= mem[ra_q[j]];
    end
  end

  always_ff @(posedge clk) begin
    rvalid <= rv_q;
    rgrp   <= rg_q;
  end
endmodule
