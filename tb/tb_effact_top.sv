// End-to-end testbench for effact_top at reduced size (4 lanes, N = 16, 4 rows per
// limb) with a behavioural HBM that stalls at random.
//
// The host loads the twiddle memory, the modulus table (q = 998244353) and a program
// that exercises every unit and mechanism:
//   LoadRes a, c; NTT(a); MMUL with the operand b streamed from HBM; MAC (NTT unit in
//   MAC mode) adding NTT(a)*c; iNTT; AUTO (k = 5) of NTT(a); MMAD whose result streams
//   to HBM; StoreRes; VecCopy; a scalar loop of MMADs closed by SBNE; HALT.
// All data are Montgomery-form residues; references are worked out here in plain
// integers from the definitions (negacyclic NTT sums, automorphism index map).
// Mechanisms counted, each must occur: out-of-order issue, scoreboard stall cycles,
// stream-in stall (a unit waits for a streamed row), stream-out transfer, arbitration
// with several HBM requesters waiting, NTT / iNTT / MAC modes, taken branch.
module tb_effact_top;
  import effact_pkg::*;
  localparam int unsigned L = 4, LN = 4, RW = 2, ROWS = 4, N = 16, DW = L * WORD_W;
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
    #2000000; failures++;
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

  // mechanism counters
  int c_si_stall = 0, c_so = 0, c_contend = 0, c_ntt = 0, c_intt = 0, c_mac = 0, c_branch = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_mmul.busy && dut.u_mmul.cur.s1_stream && dut.u_mmul.row < ROWS && !dut.si_valid) c_si_stall++;
    if (hbm_valid && hbm_ready && dut.u_mem.rq_valid[3]) c_so += dut.u_mem.rq_ready[3];
    if ($countones(dut.u_mem.rq_valid) > 1) c_contend++;
    if (dut.u_ntt.start && !dut.u_ntt.busy) begin
      if (dut.uop.op == OP_NTT) c_ntt++;
      if (dut.uop.op == OP_INTT) c_intt++;
      if (dut.uop.op == OP_MAC) c_mac++;
    end
    if (dut.u_core.taken) c_branch++;
  end

  longint unsigned a [N], b [N], c [N], A [N], v6 [N], v8 [N], psi, psii;
  instr_t prog [$];
  initial begin
    run = 0; ic_we = 0; mt_we = 0; tf_we = 0; ic_waddr = '0; ic_wdata = '0; mt_idx = '0;
    mt_q = '0; mt_qinv = '0; tf_addr = '0; tf_wdata = '0;
    psi = powm(3, (Q - 1) / (2 * N)); psii = powm(psi, 2 * N - 1);
    for (int i = 0; i < N; i++) begin
      a[i] = {$urandom} % Q; b[i] = {$urandom} % Q; c[i] = {$urandom} % Q;
      hw(i / L, i % L, to_m(a[i])); hw(4 + i / L, i % L, to_m(b[i])); hw(8 + i / L, i % L, to_m(c[i]));
    end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 2 * ROWS; t++) begin
      for (int l = 0; l < L; l++) tf_wdata[l] = to_m(powm(t < ROWS ? psi : psii, brv((t % ROWS) * L + l, LN)));
      tf_addr = (RW+1)'(t); tf_we = 1; @(negedge clk);
    end
    tf_we = 0;
    mt_we = 1; mt_idx = 1; mt_q = Q; mt_qinv = qinv_of(Q); @(negedge clk); mt_we = 0;
    // program
    prog.push_back(mk(OP_SADDI, 1, 0, 0, 4));         // s1 = 4  (b)
    prog.push_back(mk(OP_SADDI, 3, 0, 0, 32));        // s3 = 32 (streamed result)
    prog.push_back(mk(OP_LOAD, 0, 0, 0, 0));          // v0 <- a
    begin instr_t i; i = mk(OP_MMUL, 12, 0, 1, 0); i.s1_stream = 1; prog.push_back(i); end // v12 = a*b, streamed b
    prog.push_back(mk(OP_LOAD, 2, 0, 0, 8));          // v2 <- c (competes with the stream for HBM)
    prog.push_back(mk(OP_STORE, 0, 12, 0, 56));       // HBM[56..] <- v12
    prog.push_back(mk(OP_NTT, 4, 0, 0, 0));           // v4 = NTT(v0), v5 scratch
    begin instr_t i; i = mk(OP_MMUL, 6, 4, 1, 0); i.s1_stream = 1; prog.push_back(i); end  // v6 = v4*b
    prog.push_back(mk(OP_MAC, 6, 4, 2, 0));           // v6 += v4*v2
    prog.push_back(mk(OP_INTT, 8, 6, 0, 0));          // v8 = iNTT(v6), v9 scratch
    prog.push_back(mk(OP_AUTO, 10, 4, 0, 5));         // v10 = sigma_5(v4)
    begin instr_t i; i = mk(OP_MMAD, 3, 8, 0, 0); i.imm_f = 1; i.imm = 64'(to_m(1)); i.d_stream = 1; prog.push_back(i); end
    prog.push_back(mk(OP_STORE, 0, 10, 0, 40));       // HBM[40..] <- v10
    prog.push_back(mk(OP_VCOPY, 11, 0, 0, 0));        // v11 = v0
    prog.push_back(mk(OP_SADDI, 5, 0, 0, 0));         // s5 = 0
    prog.push_back(mk(OP_SADDI, 6, 0, 0, 2));         // s6 = 2
    prog.push_back(mk(OP_MMAD, 11, 11, 0, 0));        // loop: v11 += v0
    prog.push_back(mk(OP_SADDI, 5, 5, 0, 1));
    prog.push_back(mk(OP_SBNE, 5, 6, 0, -2));
    prog.push_back(mk(OP_STORE, 0, 11, 0, 48));       // HBM[48..] <- v11 = 3a
    prog.push_back(mk(OP_HALT, 0, 0, 0, 0));
    foreach (prog[i]) begin
      ic_we = 1; ic_waddr = 12'(i); ic_wdata = prog[i]; @(negedge clk);
    end
    ic_we = 0;
    run = 1; @(negedge clk); run = 0;
    repeat (3) @(negedge clk);
    while (!halted) @(negedge clk);
    // references
    for (int j = 0; j < N; j++) begin
      A[j] = 0;
      for (int i = 0; i < N; i++) A[j] = (A[j] + mulm(a[i], powm(psi, ((2 * j + 1) * i) % (2 * N)))) % Q;
    end
    // v6 slot p holds natural element brv(p); b and c are given per slot
    for (int p = 0; p < N; p++) v6[brv(p, LN)] = (mulm(A[brv(p, LN)], b[p]) + mulm(A[brv(p, LN)], c[p])) % Q;
    for (int i = 0; i < N; i++) begin
      v8[i] = 0;
      for (int j = 0; j < N; j++) v8[i] = (v8[i] + mulm(v6[j], powm(psii, ((2 * j + 1) * i) % (2 * N)))) % Q;
    end
    for (int i = 0; i < N; i++) begin
      int unsigned p; p = brv(i, LN);
      checks++; if (hb(32 + i / L, i % L) !== to_m((v8[i] + 1) % Q)) failures++;
      checks++; if (hb(40 + p / L, p % L) !== to_m(A[(5 * i + 2) % N])) failures++;
      checks++; if (hb(48 + i / L, i % L) !== to_m(mulm(a[i], 3))) failures++;
      checks++; if (hb(56 + i / L, i % L) !== to_m(mulm(a[i], b[i]))) failures++;
    end
    $display("issued=%0d ooo=%0d stall=%0d si_stall=%0d so=%0d contend=%0d ntt=%0d intt=%0d mac=%0d branch=%0d",
             n_issued, n_ooo, n_stall, c_si_stall, c_so, c_contend, c_ntt, c_intt, c_mac, c_branch);
    checks++; if (n_issued != 15) failures++;
    checks++; if (n_ooo == 0) failures++;
    checks++; if (n_stall == 0) failures++;
    checks++; if (c_si_stall == 0) failures++;
    checks++; if (c_so != ROWS) failures++;
    checks++; if (c_contend == 0) failures++;
    checks++; if (c_ntt != 1 || c_intt != 1 || c_mac != 1) failures++;
    checks++; if (c_branch != 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
