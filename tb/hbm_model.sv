// hbm_model: behavioural model of the off-chip HBM (simulation only, not synthesizable
// logic of the design). One request per cycle when ready is high; ready drops at random
// (1 cycle in READY_DIV) to imitate refresh and bank conflicts; reads return in order
// after LAT cycles. Memory words are whole rows of DW bits, DEPTH rows.
module hbm_model #(
  parameter int unsigned DW = 64,
  parameter int unsigned AW = 8,
  parameter int unsigned LAT = 3,
  parameter int unsigned READY_DIV = 4
) (
  input  logic          clk,
  input  logic          valid,
  output logic          ready,
  input  logic          we,
  input  logic [31:0]   addr,
  input  logic [DW-1:0] wdata,
  output logic          rvalid,
  output logic [DW-1:0] rdata
);
  logic [DW-1:0] mem [1 << AW];
  logic [DW-1:0] pipe [LAT];
  logic [LAT-1:0] pv = '0;
  int unsigned reads = 0, writes = 0;
  always @(negedge clk) ready <= (READY_DIV == 0) || ($urandom % READY_DIV != 0);
  initial ready = 1'b0;
  always_ff @(posedge clk) begin
    pv <= {pv[LAT-2:0], valid && ready && !we};
    pipe[0] <= mem[addr[AW-1:0]];
    for (int i = 1; i < LAT; i++) pipe[i] <= pipe[i-1];
    if (valid && ready && we) begin mem[addr[AW-1:0]] <= wdata; writes++; end
    if (valid && ready && !we) reads++;
  end
  assign rvalid = pv[LAT-1];
  assign rdata  = pipe[LAT-1];
endmodule
