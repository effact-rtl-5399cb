// Self-checking testbench for ntt_unit (NTTU).
// A 4-lane unit with N = 64 (16 rows) runs a forward NTT, an inverse NTT and a MAC on
// random data modulo the NTT-friendly prime 998244353 = 119*2^23 + 1. References are
// computed here directly from the definitions, in plain (non-Montgomery) integers:
//   forward: slot p holds A_bitrev(p), A_j = sum_i a_i psi^((2j+1) i)
//   inverse: iNTT(NTT(a)) = N * a (the 1/N factor is left to base conversion)
//   MAC:     acc + x * y
// The transform must take log2(N) * (ROWS/2 + 3) cycles.
module tb_ntt_unit;
  import effact_pkg::*;
  localparam int unsigned L = 4, LN = 6, LL = 2, RW = LN - LL, RA = REG_W + RW;
  localparam int unsigned ROWS = 1 << RW, N = 1 << LN;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, wa_en, wb_en, tf_we;
  uop_t uop;
  logic [RA-1:0] ra_addr, rb_addr, rc_addr, wa_addr, wb_addr;
  logic [L-1:0][WORD_W-1:0] ra_data, rb_data, rc_data, wa_data, wb_data, tf_wdata;
  logic [RW:0] tf_addr;
  logic [L-1:0][WORD_W-1:0] rfr [0:(1<<RA)-1];

  ntt_unit #(.LANES(L), .LOG_N(LN)) dut (.*);

  always_ff @(posedge clk) begin
    ra_data <= rfr[ra_addr]; rb_data <= rfr[rb_addr]; rc_data <= rfr[rc_addr];
    if (wa_en) rfr[wa_addr] <= wa_data;
    if (wb_en) rfr[wb_addr] <= wb_data;
  end

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  localparam longint unsigned Q = 998244353;
  function automatic longint unsigned mulm(longint unsigned a, longint unsigned b);
    return longint'((128'(a) * 128'(b)) % 128'(Q));
  endfunction
  function automatic longint unsigned powm(longint unsigned b, longint unsigned e);
    longint unsigned r; r = 1;
    while (e != 0) begin if (e[0]) r = mulm(r, b); b = mulm(b, b); e >>= 1; end
    return r;
  endfunction
  function automatic word_t to_m(longint unsigned x);   // x * 2^54 mod q
    return word_t'((128'(x) << 54) % 128'(Q));
  endfunction
  function automatic int unsigned brv(int unsigned x, int unsigned nb);
    int unsigned y; y = 0;
    for (int i = 0; i < nb; i++) if (x[i]) y |= 1 << (nb - 1 - i);
    return y;
  endfunction
  function automatic word_t qinv_of(word_t q);
    longint unsigned x; x = 1;
    for (int i = 0; i < 7; i++) x = x * (2 - longint'(q) * x);
    return word_t'(-x);
  endfunction
  task automatic run(uop_t u, output int cyc);
    @(negedge clk); uop = u; start = 1; @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask
  function automatic word_t rd(int r, int i);
    return rfr[{6'(r), RW'(i / L)}][i % L];
  endfunction
  task automatic wr(int r, int i, word_t v);
    rfr[{6'(r), RW'(i / L)}][i % L] = v;
  endtask

  longint unsigned a [N], x [N], y [N], A, psi, psii;
  int cyc;
  initial begin
    start = 0; uop = '0; tf_we = 0; tf_addr = '0; tf_wdata = '0;
    psi  = powm(3, (Q - 1) / (2 * N));
    psii = powm(psi, 2 * N - 1);
    repeat (2) @(negedge clk); rst_n = 1;
    // twiddle tables, bit-reversed, Montgomery form
    for (int t = 0; t < 2 * ROWS; t++) begin
      for (int l = 0; l < L; l++) begin
        int unsigned i; i = (t % ROWS) * L + l;
        tf_wdata[l] = to_m(powm(t < ROWS ? psi : psii, brv(i, LN)));
      end
      tf_addr = (RW+1)'(t); tf_we = 1; @(negedge clk);
    end
    tf_we = 0;
    for (int i = 0; i < N; i++) begin a[i] = {$urandom} % Q; wr(2, i, to_m(a[i])); end
    // forward NTT: src 2 -> dest 4 (5 is scratch)
    uop = '0; uop.op = OP_NTT; uop.src0 = 2; uop.dest = 4; uop.q = Q; uop.qinv = qinv_of(Q);
    run(uop, cyc);
    checks++; if (cyc != LN * (ROWS / 2 + 3) + 1) begin failures++; $display("ntt cycles %0d", cyc); end
    for (int p = 0; p < N; p++) begin
      int unsigned j; j = brv(p, LN); A = 0;
      for (int i = 0; i < N; i++) A = (A + mulm(a[i], powm(psi, ((2 * j + 1) * i) % (2 * N)))) % Q;
      checks++; if (rd(4, p) !== to_m(A)) failures++;
    end
    // inverse: src 4 -> dest 6 (7 scratch); expect N * a
    uop.op = OP_INTT; uop.src0 = 4; uop.dest = 6;
    run(uop, cyc);
    checks++; if (cyc != LN * (ROWS / 2 + 3) + 1) failures++;
    for (int i = 0; i < N; i++) begin
      checks++; if (rd(6, i) !== to_m(mulm(a[i], N))) failures++;
    end
    checks++; if (rd(2, 5) !== to_m(a[5])) failures++;   // source untouched
    // MAC: reg 8 += reg 9 * reg 10, then reg 8 += reg 9 * imm
    for (int i = 0; i < N; i++) begin
      x[i] = {$urandom} % Q; y[i] = {$urandom} % Q;
      wr(8, i, to_m(a[i])); wr(9, i, to_m(x[i])); wr(10, i, to_m(y[i]));
    end
    uop.op = OP_MAC; uop.dest = 8; uop.src0 = 9; uop.src1 = 10;
    run(uop, cyc);
    checks++; if (cyc != ROWS + 4) failures++;
    for (int i = 0; i < N; i++) begin
      checks++; if (rd(8, i) !== to_m((a[i] + mulm(x[i], y[i])) % Q)) failures++;
    end
    uop.imm_f = 1; uop.imm = to_m(7);
    run(uop, cyc);
    for (int i = 0; i < N; i++) begin
      checks++; if (rd(8, i) !== to_m((a[i] + mulm(x[i], y[i]) + mulm(x[i], 7)) % Q)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
