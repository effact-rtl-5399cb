// Self-checking testbench for auto_unit (AUTOU).
// A 4-lane unit with N = 32 (8 rows) applies sigma_k for several odd k (including
// rotation steps k = 5^s mod 2N) to a limb stored in bit-reversed order. The reference
// is the NTT-domain definition: natural element j of the result equals natural element
// (j*k + (k-1)/2) mod N of the input; slot p of storage holds natural element
// bitrev(p). Each run must take ROWS + 3 cycles.
module tb_auto_unit;
  import effact_pkg::*;
  localparam int unsigned L = 4, LN = 5, RW = 3, RA = REG_W + RW, ROWS = 8, N = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, busy, done, w_en;
  uop_t uop;
  logic [RA-1:0] ra_addr, w_addr;
  logic [L-1:0][WORD_W-1:0] ra_data, w_data;
  logic [L-1:0][WORD_W-1:0] rfr [0:(1<<RA)-1];

  auto_unit #(.LANES(L), .LOG_N(LN)) dut (.*);

  always_ff @(posedge clk) begin
    ra_data <= rfr[ra_addr];
    if (w_en) rfr[w_addr] <= w_data;
  end
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic int unsigned brv(int unsigned x, int unsigned nb);
    int unsigned y; y = 0;
    for (int i = 0; i < nb; i++) if (x[i]) y |= 1 << (nb - 1 - i);
    return y;
  endfunction
  task automatic run(uop_t u, output int cyc);
    @(negedge clk); uop = u; start = 1; @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask
  word_t A [N];
  int cyc, ks [6];
  initial begin
    start = 0; uop = '0;
    ks = '{5, 25, 61, 3, 63, 1};   // 5^1, 5^2, 5^-1 style values mod 64, and others
    repeat (2) @(negedge clk); rst_n = 1;
    foreach (ks[t]) begin
      for (int j = 0; j < N; j++) begin
        int unsigned p; p = brv(j, LN);
        A[j] = word_t'({$urandom, $urandom});
        rfr[{6'd1, RW'(p / L)}][p % L] = A[j];
      end
      uop = '0; uop.op = OP_AUTO; uop.src0 = 1; uop.dest = 2; uop.imm = 64'(ks[t]);
      run(uop, cyc);
      checks++; if (cyc != ROWS + 4) failures++;
      for (int j = 0; j < N; j++) begin
        int unsigned p, src;
        p = brv(j, LN); src = (j * ks[t] + (ks[t] - 1) / 2) % N;
        checks++; if (rfr[{6'd2, RW'(p / L)}][p % L] !== A[src]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
