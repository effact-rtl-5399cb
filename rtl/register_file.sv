// register_file: the on-chip SRAM, split into limb-sized vector registers.
//
// The compiler treats the SRAM as NREGS registers of one residue polynomial each
// (27 MB = 64 limbs of 2^16 x 54 bits in the ASIC configuration) and allocates them
// with a linear-scan register allocator. A register is ROWS = N/LANES rows of LANES
// words; the row address is {register, row}. Rows are the unit of every access.
//
// Ports: NR read ports with one cycle of latency (synchronous SRAM read) and NW write
// ports. The default 9 read / 6 write ports serve the function units at full rate
// (MADD 2R 1W, MMUL 2R 1W, NTT 3R 2W, AUTO 1R 1W, memory controller 1R 1W); at 1024
// lanes, 54-bit words and 500 MHz that is about 37 TB/s, close to the ~30 TB/s on-chip
// bandwidth the paper quotes. The scoreboard in the control core keeps two units from
// writing one register; an assertion checks that no two write ports hit the same row
// in one cycle. A read and a write of the same row in one cycle return the old data.
// The paper gives the capacity and the register view; the port count, the flat
// (unbanked) organisation and the latency are this design's choices.
module register_file
  import effact_pkg::*;
#(
  parameter int unsigned LANES     = 1024,
  parameter int unsigned LOG_N     = 16,
  parameter int unsigned LOG_LANES = $clog2(LANES),
  parameter int unsigned ROW_W     = LOG_N - LOG_LANES,
  parameter int unsigned RA_W      = REG_W + ROW_W,
  parameter int unsigned NR        = 9,
  parameter int unsigned NW        = 6
) (
  input  logic                                   clk,
  input  logic [NR-1:0][RA_W-1:0]                rd_addr,
  output logic [NR-1:0][LANES-1:0][WORD_W-1:0]   rd_data,
  input  logic [NW-1:0]                          wr_en,
  input  logic [NW-1:0][RA_W-1:0]                wr_addr,
  input  logic [NW-1:0][LANES-1:0][WORD_W-1:0]   wr_data
);
  logic [LANES-1:0][WORD_W-1:0] mem [1 << RA_W];

  always_ff @(posedge clk) begin
    for (int unsigned r = 0; r < NR; r++) rd_data[r] <= mem[rd_addr[r]];
    for (int unsigned w = 0; w < NW; w++) if (wr_en[w]) mem[wr_addr[w]] <= wr_data[w];
  end

  for (genvar a = 0; a < NW; a++) begin : g_chk
    for (genvar b = a + 1; b < NW; b++) begin : g_pair
      a_no_write_clash: assert property (@(posedge clk)
        !(wr_en[a] && wr_en[b] && wr_addr[a] == wr_addr[b]));
    end
  end
endmodule
