// Self-checking testbench for ooo_core. Function units are mocked with fixed latencies
// (MMUL slow, the others fast). The program runs a 3-iteration scalar loop whose body
// is MMUL v2=v0*v1, MMAD v3=v2+v1 (depends on the MMUL), AUTO v4=sigma(v1)
// (independent), then a LoadRes whose address comes from a scalar register and a
// HALT. Checks: the dependent MMAD never starts before its MMUL finishes; the AUTO
// overtakes the blocked MMAD (out-of-order issue) in every iteration; the loop runs
// exactly 3 times; the decoded modulus and address are right; the core halts.
module tb_ooo_core;
  import effact_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic run, halted, mt_we, si_start, so_start, si_busy, so_busy;
  logic [11:0] ic_addr;
  instr_t ic_data, prog [16];
  logic [MOD_W-1:0] mt_idx;
  word_t mt_q, mt_qinv;
  uop_t uop_o;
  logic [4:0] fu_start, fu_busy, fu_done;
  haddr_t si_addr, so_addr;
  logic [31:0] n_issued, n_ooo, n_stall;
  ooo_core dut (.*);
  always_ff @(posedge clk) ic_data <= prog[ic_addr[3:0]];
  assign si_busy = 0; assign so_busy = 0;

  // mocked units
  int lat [5] = '{3, 20, 5, 3, 4};
  int cnt [5];
  int t = 0;
  int mul_done_t = -1, mad_start_t [$], auto_start_t [$], mul_start_t [$];
  always @(posedge clk) t++;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin fu_busy <= '0; fu_done <= '0; foreach (cnt[i]) cnt[i] <= 0; end
    else for (int f = 0; f < 5; f++) begin
      fu_done[f] <= 1'b0;
      if (fu_start[f]) begin fu_busy[f] <= 1'b1; cnt[f] <= lat[f]; end
      else if (fu_busy[f]) begin
        if (cnt[f] == 1) begin fu_busy[f] <= 1'b0; fu_done[f] <= 1'b1; end
        cnt[f] <= cnt[f] - 1;
      end
    end
  end
  always @(posedge clk) begin
    if (fu_done[1]) mul_done_t = t;
    if (fu_start[1]) mul_start_t.push_back(t);
    if (fu_start[0]) begin
      mad_start_t.push_back(t);
      checks++; if (mul_done_t < 0 || mul_done_t < mul_start_t[$]) failures++;
      checks++; if (uop_o.q !== 54'd12289 || uop_o.src0 != 2) failures++;
    end
    if (fu_start[3]) auto_start_t.push_back(t);
    if (fu_start[4]) begin checks++; if (uop_o.op != OP_LOAD || uop_o.in_addr != 13 || uop_o.dest != 5) failures++; end
  end

  function automatic instr_t mk(opcode_e op, int d, int s0, int s1, longint imm);
    instr_t i; i = '0; i.op = op; i.dest = 8'(d); i.src0 = 8'(s0); i.src1 = 8'(s1); i.imm = 64'(imm); i.mod = 5'd2;
    return i;
  endfunction
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    run = 0; mt_we = 0; mt_idx = '0; mt_q = '0; mt_qinv = '0;
    prog[0] = mk(OP_SADDI, 1, 0, 0, 3);
    prog[1] = mk(OP_SADDI, 2, 0, 0, 0);
    prog[2] = mk(OP_MMUL, 2, 0, 1, 0);
    prog[3] = mk(OP_MMAD, 3, 2, 1, 0);
    prog[4] = mk(OP_AUTO, 4, 1, 0, 5);
    prog[5] = mk(OP_SADDI, 2, 2, 0, 1);
    prog[6] = mk(OP_SBNE, 2, 1, 0, -4);
    prog[7] = mk(OP_LOAD, 5, 1, 0, 10);
    prog[8] = mk(OP_HALT, 0, 0, 0, 0);
    for (int i = 9; i < 16; i++) prog[i] = mk(OP_HALT, 0, 0, 0, 0);
    repeat (2) @(negedge clk); rst_n = 1;
    mt_we = 1; mt_idx = 2; mt_q = 12289; mt_qinv = 1; @(negedge clk); mt_we = 0;
    run = 1; @(negedge clk); run = 0;
    repeat (3) @(negedge clk);
    while (!halted) @(negedge clk);
    checks++; if (mad_start_t.size() != 3 || auto_start_t.size() != 3) failures++;
    for (int i = 0; i < 3 && i < mad_start_t.size() && i < auto_start_t.size(); i++) begin
      checks++; if (auto_start_t[i] >= mad_start_t[i]) failures++;
    end
    checks++; if (n_issued != 10) failures++;
    checks++; if (n_ooo == 0) failures++;
    $display("issued=%0d ooo=%0d stall=%0d", n_issued, n_ooo, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
