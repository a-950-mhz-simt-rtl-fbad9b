// ctrl_delay_chain: register delay chain for the issued control.
//
// Every issued slot (decoded controls plus thread row and width position)
// passes through STAGES registers on its way to the SPs and the shared memory.
// Control-flow decisions are all taken before this point, so the chain only
// adds latency; it lets the instruction unit sit away from the core. Output q
// equals input d delayed by STAGES clocks. The valid bit is reset; the other
// fields need no reset. STAGES = 3 is the number of registers drawn in the
// published fetch diagram and may be raised freely.
module ctrl_delay_chain
  import egpu_pkg::*;
#(
  parameter int STAGES = 3
) (
  input  logic   clk,
  input  logic   rst,
  input  issue_t d,
  output issue_t q
);
  issue_t chain [STAGES+1];
  assign chain[0] = d;
  for (genvar i = 0; i < STAGES; i++) begin : g_stage
    always_ff @(posedge clk) begin
      chain[i+1] <= chain[i];
      if (rst) chain[i+1].valid <= 1'b0;
    end
  end
  assign q = chain[STAGES];
endmodule
