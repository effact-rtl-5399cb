// stream_fifo: the streaming FIFO through which rows pass between HBM and the
// function units without being staged in the register-file SRAM.
//
// A synchronous first-in first-out queue of DEPTH rows (each WIDTH bits, a row of
// LANES words). dout shows the oldest row whenever valid is high; pop removes it,
// push appends din. Push and pop may happen in the same cycle, also when full.
// count gives the occupancy so producers can reserve room for rows they still have in
// flight (the HBM reader counts outstanding requests, a function unit its pipeline).
// The paper adds "a separate FIFO address space" for streaming; its depth is not given,
// DEPTH = 8 is this design's choice. Assertions flag a push into a full FIFO and a pop
// from an empty one.
module stream_fifo #(
  parameter int unsigned WIDTH = 1024 * 54,
  parameter int unsigned DEPTH = 8,
  parameter int unsigned CNT_W = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             valid,
  output logic             full,
  output logic [CNT_W-1:0] count
);
  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [PTR_W-1:0] rp, wp;

  assign valid = (count != 0);
  assign full  = (count == CNT_W'(DEPTH));
  assign dout  = mem[rp];

  always_ff @(posedge clk) begin
    if (push && (!full || pop)) mem[wp] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; count <= '0;
    end else begin
      if (push && (!full || pop)) wp <= (wp == PTR_W'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop && valid)           rp <= (rp == PTR_W'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + CNT_W'(push && (!full || pop)) - CNT_W'(pop && valid);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> valid);
endmodule
