// Full-size testbench: effact_top with its default parameters (1024 lanes, N = 2^16,
// 54-bit words). The host loads the twiddle tables for q = 998244353 and a program
// LoadRes v0 <- HBM[0..63]; NTT v2 = NTT(v0); MMUL v4 = v2 * v2; StoreRes HBM[64..] <- v2;
// StoreRes HBM[128..] <- v4; HALT
// The stored transform is checked against an independent in-place Cooley-Tukey
// negacyclic NTT computed here (natural input, bit-reversed output), and the product
// against the element-wise square. The NTT unit must raise done log2(N) * (ROWS/2 + 3) + 1
// cycles after the edge at which it samples start (three pipeline stages per pass).
module tb_effact_full;
  import effact_pkg::*;
  localparam int unsigned L = 1024, LN = 16, LL = 10, RW = 6, ROWS = 64, N = 1 << 16;
  localparam int unsigned DW = L * WORD_W;
  localparam longint unsigned Q = 998244353;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic run, halted, ic_we, mt_we, tf_we;
  logic [11:0] ic_waddr;
  instr_t ic_wdata;
  logic [MOD_W-1:0] mt_idx;
  word_t mt_q, mt_qinv;
  logic [RW:0] tf_addr;
  logic [L-1:0][WORD_W-1:0] tf_wdata;
  logic hbm_valid, hbm_ready, hbm_we, hbm_rvalid;
  haddr_t hbm_addr;
  logic [DW-1:0] hbm_wdata, hbm_rdata;
  logic [31:0] n_issued, n_ooo, n_stall;

  effact_top dut (.*);
  hbm_model #(.DW(DW), .AW(8), .READY_DIV(0)) u_hbm (.clk, .valid(hbm_valid), .ready(hbm_ready),
    .we(hbm_we), .addr(hbm_addr), .wdata(hbm_wdata), .rvalid(hbm_rvalid), .rdata(hbm_rdata));

  int cyc = 0;
  always @(posedge clk) cyc++;
  initial begin
    wait (cyc == 200000); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic longint unsigned mulm(longint unsigned a, longint unsigned b);
    return longint'((128'(a) * 128'(b)) % 128'(Q));
  endfunction
  function automatic longint unsigned powm(longint unsigned b, longint unsigned e);
    longint unsigned r; r = 1;
    while (e != 0) begin if (e[0]) r = mulm(r, b); b = mulm(b, b); e >>= 1; end
    return r;
  endfunction
  function automatic word_t to_m(longint unsigned x);
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
  function automatic instr_t mk(opcode_e op, int d, int s0, int s1, longint imm);
    instr_t i; i = '0; i.op = op; i.dest = 8'(d); i.src0 = 8'(s0); i.src1 = 8'(s1);
    i.imm = 64'(imm); i.mod = 5'd0;
    return i;
  endfunction

  longint unsigned a [], pw [], x [];
  longint unsigned psi;
  int t_start, t_done;
  always @(posedge clk) begin
    if (dut.u_ntt.start && !dut.u_ntt.busy) t_start = cyc;
    if (dut.u_ntt.done) t_done = cyc;
  end
  initial begin
    instr_t prog [6];
    run = 0; ic_we = 0; mt_we = 0; tf_we = 0; ic_waddr = '0; ic_wdata = '0; mt_idx = '0;
    mt_q = '0; mt_qinv = '0; tf_addr = '0; tf_wdata = '0;
    a = new[N]; pw = new[N]; x = new[N];
    psi = powm(3, (Q - 1) / (2 * N));
    for (int i = 0; i < N; i++) begin
      a[i] = {$urandom} % Q;
      u_hbm.mem[i / L][(i % L) * WORD_W +: WORD_W] = to_m(a[i]);
    end
    repeat (2) @(negedge clk); rst_n = 1;
    // forward table psi^bitrev(i), inverse table psi^-bitrev(i)
    pw[0] = 1; for (int i = 1; i < N; i++) pw[i] = mulm(pw[i-1], psi);
    for (int t = 0; t < 2 * ROWS; t++) begin
      for (int l = 0; l < L; l++) begin
        int unsigned e; e = brv((t % ROWS) * L + l, LN);
        tf_wdata[l] = to_m(t < ROWS ? pw[e] : ((e == 0) ? 1 : (Q - pw[N - e])));   // psi^-e = -psi^(N-e)
      end
      tf_addr = (RW+1)'(t); tf_we = 1; @(negedge clk);
    end
    tf_we = 0;
    mt_we = 1; mt_idx = 0; mt_q = Q; mt_qinv = qinv_of(Q); @(negedge clk); mt_we = 0;
    prog[0] = mk(OP_LOAD, 0, 0, 0, 0);
    prog[1] = mk(OP_NTT, 2, 0, 0, 0);
    prog[2] = mk(OP_MMUL, 4, 2, 2, 0);
    prog[3] = mk(OP_STORE, 0, 2, 0, 64);
    prog[4] = mk(OP_STORE, 0, 4, 0, 128);
    prog[5] = mk(OP_HALT, 0, 0, 0, 0);
    foreach (prog[i]) begin ic_we = 1; ic_waddr = 12'(i); ic_wdata = prog[i]; @(negedge clk); end
    ic_we = 0;
    run = 1; @(negedge clk); run = 0;
    repeat (3) @(negedge clk);
    while (!halted) @(negedge clk);
    // reference: in-place Cooley-Tukey, psi^bitrev twiddles, bit-reversed output
    x = a;
    for (int m = 1, t = N / 2; m < N; m *= 2, t /= 2)
      for (int i = 0; i < m; i++) begin
        longint unsigned s; s = pw[brv(m + i, LN)];
        for (int j = 2 * i * t; j < 2 * i * t + t; j++) begin
          longint unsigned u, v;
          u = x[j]; v = mulm(x[j + t], s);
          x[j] = (u + v) % Q; x[j + t] = (u + Q - v) % Q;
        end
      end
    for (int p = 0; p < N; p++) begin
      checks++; if (u_hbm.mem[64 + p / L][(p % L) * WORD_W +: WORD_W] !== to_m(x[p])) failures++;
      checks++; if (u_hbm.mem[128 + p / L][(p % L) * WORD_W +: WORD_W] !== to_m(mulm(x[p], x[p]))) failures++;
    end
    checks++;
    if (t_done - t_start != LN * (ROWS / 2 + 3) + 1) begin   // +1: start is sampled the cycle it is seen
      failures++; $display("ntt took %0d cycles", t_done - t_start);
    end
    $display("cycles=%0d issued=%0d ooo=%0d", cyc, n_issued, n_ooo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
