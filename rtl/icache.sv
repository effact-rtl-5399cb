// icache: instruction store of the control core.
//
// DEPTH instruction words (instr_t) with one synchronous read port for the fetch stage
// (the word at rd_addr appears on rd_data one cycle later) and one write port through
// which the host loads the program before starting the accelerator. The paper draws an
// iCache beside the out-of-order core but says nothing of its size or refill; here it is
// a host-loaded instruction memory with no miss handling, DEPTH = 4096 being this
// design's choice.
module icache
  import effact_pkg::*;
#(
  parameter int unsigned DEPTH  = 4096,
  parameter int unsigned ADDR_W = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic [ADDR_W-1:0] rd_addr,
  output instr_t            rd_data,
  input  logic              wr_en,
  input  logic [ADDR_W-1:0] wr_addr,
  input  instr_t            wr_data
);
  instr_t mem [DEPTH];
  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end
endmodule
