// auto_unit (AUTOU): automorphism sigma_k of a residue polynomial held in the NTT domain.
//
// sigma_k maps a(X) to a(X^k) (k odd; a rotation by s slots uses k = 5^s mod 2N, which
// the instruction carries as its immediate). In the NTT domain it is a pure permutation:
// output element j takes input element pi(j) = j*k + (k-1)/2 mod N.
//
// The NTT unit leaves limbs in bit-reversed order, so storage row r, lane c holds
// natural element j = bitrev(c)*ROWS + bitrev(r). Read that way each storage row is one
// row of the column-major "normal order" matrix, and pi maps every element of a row
// into a single row: the low part of j (its row) moves as a whole, so it is handled by
// fetching source rows in a permuted order, and only an LANES-element permutation per
// row remains. The row datapath is therefore, as in the paper:
//   fixed network (lane x <- lane bitrev(x), a wired transpose)
//   -> auto-mapping crossbar (x' <- x = (x'*k + off(r')) mod LANES)
//   -> fixed network (back to bit-reversed lanes).
// Output row r' reads source row bitrev((bitrev(r')*k + (k-1)/2) mod ROWS), and
// off(r') = floor((bitrev(r')*k + (k-1)/2) / ROWS).
//
// Interface: one register-file read port (1-cycle latency) and one write port. Timing:
// one row per cycle, done pulses ROWS + 3 cycles after start is sampled. Following the
// paper: the row-local decomposition, the fixed networks and the fetch-order row
// permutation. This design's choices: the pipeline and the immediate carrying k. The
// paper's sign transformation for coefficient-domain use (and the TFHE shift mode with
// the fixed network bypassed) is not included.
module auto_unit
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
  output logic                          w_en,
  output logic [RA_W-1:0]               w_addr,
  output logic [LANES-1:0][WORD_W-1:0]  w_data
);
  localparam int unsigned ROWS = 1 << ROW_W;

  uop_t              cur;
  logic [ROW_W:0]    row;            // output row r'
  logic              v1, v2, go;
  logic [ROW_W-1:0]  row1, row2;
  logic [31:0]       k, t, off1;
  logic [ROW_W-1:0]  src_row;
  logic [LANES-1:0][WORD_W-1:0] fn_in, mapped, res;

  assign k  = 32'(cur.imm);
  assign go = busy && (row < ROWS);
  always_comb begin
    t       = bitrev(32'(row[ROW_W-1:0]), ROW_W) * k + (k - 1) / 2;
    src_row = ROW_W'(bitrev(t & (ROWS - 1), ROW_W));
  end
  assign ra_addr = {cur.src0, src_row};

  always_comb begin
    for (int unsigned x = 0; x < LANES; x++)
      fn_in[x] = ra_data[bitrev(x, LOG_LANES)];              // fixed network
    for (int unsigned x = 0; x < LANES; x++)
      mapped[x] = fn_in[(x * k + off1) & (LANES - 1)];      // auto-mapping unit
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; cur <= '0; row <= '0; v1 <= 1'b0; v2 <= 1'b0;
      row1 <= '0; row2 <= '0; off1 <= '0; res <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        cur <= uop; busy <= 1'b1; row <= '0;
      end
      v1 <= go;
      if (go) begin
        row1 <= row[ROW_W-1:0]; off1 <= t >> ROW_W; row <= row + 1'b1;
      end
      v2 <= v1;
      if (v1) begin
        row2 <= row1;
        for (int unsigned c = 0; c < LANES; c++)
          res[c] <= mapped[bitrev(c, LOG_LANES)];            // fixed network back
      end
      if (busy && row == ROWS && !v1 && !v2) begin
        busy <= 1'b0; done <= 1'b1;
      end
    end
  end

  assign w_en   = v2;
  assign w_addr = {cur.dest, row2};
  assign w_data = res;
endmodule
