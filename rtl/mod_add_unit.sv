// mod_add_unit (MADDU): lane-parallel modular addition of residue polynomials.
//
// Executes MMAD: dest = src0 + src1 (mod q), or dest = src0 + imm when imm_f is set.
// One row of LANES coefficients is processed per cycle, so a limb of N = 2^LOG_N
// coefficients takes N/LANES cycles plus a 2-cycle pipeline.
//
// Streaming (the paper's "streaming memory access"): when s1_stream is set the second
// operand rows come from the streaming FIFO instead of the register file, and when
// d_stream is set results are pushed into the outbound streaming FIFO instead of being
// written back. A row only advances when its streamed operand is present and the
// outbound FIFO can take the rows still in flight; otherwise the unit stalls.
//
// Timing: cycle 0 issues the register-file reads (and pops the inbound FIFO), cycle 1
// receives the data and adds, cycle 2 writes the row back. start is taken only while
// busy is low; done pulses for one cycle after the last row has been written.
// The paper gives this unit's function and its lane count; the pipeline, the
// handshake and the stall rule are this design's choices.
module mod_add_unit
  import effact_pkg::*;
#(
  parameter int unsigned LANES     = 1024,
  parameter int unsigned LOG_N     = 16,
  parameter int unsigned LOG_LANES = $clog2(LANES),
  parameter int unsigned ROW_W     = LOG_N - LOG_LANES,
  parameter int unsigned RA_W      = REG_W + ROW_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  uop_t                          uop,
  output logic                          busy,
  output logic                          done,
  output logic [RA_W-1:0]               ra_addr,
  input  logic [LANES-1:0][WORD_W-1:0]  ra_data,
  output logic [RA_W-1:0]               rb_addr,
  input  logic [LANES-1:0][WORD_W-1:0]  rb_data,
  output logic                          w_en,
  output logic [RA_W-1:0]               w_addr,
  output logic [LANES-1:0][WORD_W-1:0]  w_data,
  input  logic                          si_valid,
  input  logic [LANES-1:0][WORD_W-1:0]  si_data,
  output logic                          si_pop,
  output logic                          so_push,
  output logic [LANES-1:0][WORD_W-1:0]  so_data,
  input  logic                          so_space_ok
);
  localparam int unsigned ROWS = 1 << ROW_W;

  uop_t                         cur;
  logic [ROW_W:0]               row;
  logic                         v1, v2;
  logic [ROW_W-1:0]             row1, row2;
  logic [LANES-1:0][WORD_W-1:0] srow1, res;
  logic [LANES-1:0][WORD_W-1:0] lane_out;
  logic                         go;

  assign go      = busy && (row < ROWS) && (!cur.s1_stream || si_valid) &&
                   (!cur.d_stream || so_space_ok);
  assign ra_addr = {cur.src0, row[ROW_W-1:0]};
  assign rb_addr = {cur.src1, row[ROW_W-1:0]};
  assign si_pop  = go && cur.s1_stream;

  always_comb begin
    for (int unsigned l = 0; l < LANES; l++) begin
      word_t b;
      b = cur.imm_f ? cur.imm : (cur.s1_stream ? srow1[l] : rb_data[l]);
      lane_out[l] = mod_add(ra_data[l], b, cur.q);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; row <= '0; v1 <= 1'b0; v2 <= 1'b0;
      row1 <= '0; row2 <= '0; cur <= '0; srow1 <= '0; res <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        cur <= uop; busy <= 1'b1; row <= '0;
      end
      v1 <= go;
      if (go) begin
        row1  <= row[ROW_W-1:0];
        srow1 <= si_data;
        row   <= row + 1'b1;
      end
      v2 <= v1;
      if (v1) begin
        row2 <= row1;
        res  <= lane_out;
      end
      if (busy && row == ROWS && !v1 && !v2) begin
        busy <= 1'b0; done <= 1'b1;
      end
    end
  end

  assign w_en    = v2 && !cur.d_stream;
  assign w_addr  = {cur.dest, row2};
  assign w_data  = res;
  assign so_push = v2 && cur.d_stream;
  assign so_data = res;

endmodule
