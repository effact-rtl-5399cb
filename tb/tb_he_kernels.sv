// Workload-kernel testbench for effact_top at reduced size (4 lanes, N = 64, 16 rows
// per limb). It runs the residue-level kernels that CKKS bootstrapping, logistic
// regression and ResNet-20 are built from, on one modulus (q = 998244353):
//   polynomial product  N * (a * b mod X^N + 1) = iNTT(NTT(a) . NTT(b))
//   rotation kernel      N * a(X^5) = iNTT(AUTO_5(NTT(a)))
//   base-conversion sum  c1 * v + c2 * w with MMUL by an immediate and MAC by an immediate
// The references come straight from the ring definitions (schoolbook negacyclic
// product; X -> X^5 with the sign flip of X^N = -1), not from any NTT, so they check the
// transform conventions, the automorphism index map and the missing 1/N together.
module tb_he_kernels;
  import effact_pkg::*;
  localparam int unsigned L = 4, LN = 6, RW = 4, ROWS = 16, N = 64, DW = L * WORD_W;
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

  effact_top #(.LANES(L), .LOG_N(LN)) dut (.*);
  hbm_model #(.DW(DW), .AW(7)) u_hbm (.clk, .valid(hbm_valid), .ready(hbm_ready), .we(hbm_we),
    .addr(hbm_addr), .wdata(hbm_wdata), .rvalid(hbm_rvalid), .rdata(hbm_rdata));

  initial begin
    #4000000; failures++;
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
    i.imm = 64'(imm); i.mod = 5'd1;
    return i;
  endfunction
  function automatic word_t hb(int row, int lane);     // HBM word
    logic [DW-1:0] r; r = u_hbm.mem[row];
    return r[lane*WORD_W +: WORD_W];
  endfunction
  task automatic hw(int row, int lane, word_t v);
    u_hbm.mem[row][lane*WORD_W +: WORD_W] = v;
  endtask


  longint unsigned a [N], b [N], ab [N], a5 [N], bc [N], psi, psii, c1, c2;
  instr_t prog [$];
  initial begin
    run = 0; ic_we = 0; mt_we = 0; tf_we = 0; ic_waddr = '0; ic_wdata = '0; mt_idx = '0;
    mt_q = '0; mt_qinv = '0; tf_addr = '0; tf_wdata = '0;
    psi = powm(3, (Q - 1) / (2 * N)); psii = powm(psi, 2 * N - 1);
    c1 = {$urandom} % Q; c2 = {$urandom} % Q;
    for (int i = 0; i < N; i++) begin
      a[i] = {$urandom} % Q; b[i] = {$urandom} % Q;
      hw(i / L, i % L, to_m(a[i])); hw(ROWS + i / L, i % L, to_m(b[i]));
    end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 2 * ROWS; t++) begin
      for (int l = 0; l < L; l++) tf_wdata[l] = to_m(powm(t < ROWS ? psi : psii, brv((t % ROWS) * L + l, LN)));
      tf_addr = (RW+1)'(t); tf_we = 1; @(negedge clk);
    end
    tf_we = 0;
    mt_we = 1; mt_idx = 1; mt_q = Q; mt_qinv = qinv_of(Q); @(negedge clk); mt_we = 0;
    prog.push_back(mk(OP_LOAD, 0, 0, 0, 0));                 // v0 <- a
    prog.push_back(mk(OP_LOAD, 2, 0, 0, ROWS));              // v2 <- b
    prog.push_back(mk(OP_NTT, 4, 0, 0, 0));                  // v4 = NTT(a)
    prog.push_back(mk(OP_NTT, 6, 2, 0, 0));                  // v6 = NTT(b)
    prog.push_back(mk(OP_MMUL, 8, 4, 6, 0));                 // v8 = NTT(a) . NTT(b)
    prog.push_back(mk(OP_INTT, 10, 8, 0, 0));                // v10 = N (a * b)
    prog.push_back(mk(OP_AUTO, 12, 4, 0, 5));                // v12 = sigma_5 in the NTT domain
    prog.push_back(mk(OP_INTT, 14, 12, 0, 0));               // v14 = N a(X^5)
    begin instr_t i; i = mk(OP_MMUL, 16, 10, 0, 0); i.imm_f = 1; i.imm = 64'(to_m(c1)); prog.push_back(i); end
    begin instr_t i; i = mk(OP_MAC, 16, 14, 0, 0); i.imm_f = 1; i.imm = 64'(to_m(c2)); prog.push_back(i); end
    prog.push_back(mk(OP_STORE, 0, 10, 0, 4 * ROWS));
    prog.push_back(mk(OP_STORE, 0, 14, 0, 5 * ROWS));
    prog.push_back(mk(OP_STORE, 0, 16, 0, 6 * ROWS));
    prog.push_back(mk(OP_HALT, 0, 0, 0, 0));
    foreach (prog[i]) begin
      ic_we = 1; ic_waddr = 12'(i); ic_wdata = prog[i]; @(negedge clk);
    end
    ic_we = 0;
    run = 1; @(negedge clk); run = 0;
    repeat (3) @(negedge clk);
    while (!halted) @(negedge clk);
    // references from the ring definitions: negacyclic product and X -> X^5 with sign
    for (int i = 0; i < N; i++) begin ab[i] = 0; a5[i] = 0; end
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        longint unsigned p; p = mulm(a[i], b[j]);
        if (i + j < N) ab[i + j] = (ab[i + j] + p) % Q;
        else ab[i + j - N] = (ab[i + j - N] + Q - p) % Q;
      end
    for (int i = 0; i < N; i++) begin
      int unsigned e; e = (5 * i) % (2 * N);
      if (e < N) a5[e] = a[i]; else a5[e - N] = (Q - a[i]) % Q;
    end
    for (int i = 0; i < N; i++) begin
      ab[i] = mulm(ab[i], N); a5[i] = mulm(a5[i], N);
      bc[i] = (mulm(ab[i], c1) + mulm(a5[i], c2)) % Q;
      checks++; if (hb(4 * ROWS + i / L, i % L) !== to_m(ab[i])) failures++;
      checks++; if (hb(5 * ROWS + i / L, i % L) !== to_m(a5[i])) failures++;
      checks++; if (hb(6 * ROWS + i / L, i % L) !== to_m(bc[i])) failures++;
    end
    $display("issued=%0d ooo=%0d stall=%0d", n_issued, n_ooo, n_stall);
    checks++; if (n_issued != 13) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
