// Self-checking testbench for mem_ctrl with its arbiter and FIFOs.
// Two lanes, N = 8 (4 rows per register), a behavioural HBM with random stalls.
// LoadRes, StoreRes and VecCopy are checked row by row; a stream-in run (with a slow
// consumer, so the FIFO credit rule must hold back reads) is checked for order and
// content, and a stream-out run is checked in HBM. The stream engines run while a
// LoadRes is in progress, so the arbiter must interleave three requesters.
module tb_mem_ctrl;
  import effact_pkg::*;
  localparam int unsigned L = 2, LN = 3, RW = 2, RA = REG_W + RW, ROWS = 4, DW = L * WORD_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, w_en, si_start, si_busy, si_valid, si_pop, so_start, so_busy;
  logic so_push, so_space_ok, hbm_valid, hbm_ready, hbm_we, hbm_rvalid;
  uop_t uop;
  logic [RA-1:0] ra_addr, w_addr;
  logic [L-1:0][WORD_W-1:0] ra_data, w_data, si_data, so_data;
  haddr_t si_addr, so_addr, hbm_addr;
  logic [DW-1:0] hbm_wdata, hbm_rdata;
  logic [L-1:0][WORD_W-1:0] rfr [1 << RA];

  mem_ctrl #(.LANES(L), .LOG_N(LN), .FIFO_DEPTH(4)) dut (.*);
  hbm_model #(.DW(DW), .AW(6)) u_hbm (.clk, .valid(hbm_valid), .ready(hbm_ready), .we(hbm_we),
    .addr(hbm_addr), .wdata(hbm_wdata), .rvalid(hbm_rvalid), .rdata(hbm_rdata));

  always_ff @(posedge clk) begin
    ra_data <= rfr[ra_addr];
    if (w_en) rfr[w_addr] <= w_data;
  end
  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic run(uop_t u);
    @(negedge clk); uop = u; start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
  endtask
  function automatic logic [DW-1:0] pat(int a);
    return {WORD_W'(a * 1000 + 1), WORD_W'(a * 1000 + 2)};
  endfunction

  logic [DW-1:0] got [$];
  initial begin
    start = 0; uop = '0; si_start = 0; so_start = 0; si_pop = 0; so_push = 0;
    si_addr = '0; so_addr = '0; so_data = '0;
    for (int a = 0; a < 64; a++) u_hbm.mem[a] = pat(a);
    repeat (2) @(negedge clk); rst_n = 1;
    // LoadRes: HBM rows 8..11 -> register 3
    uop = '0; uop.op = OP_LOAD; uop.dest = 3; uop.in_addr = 8;
    run(uop);
    for (int r = 0; r < ROWS; r++) begin checks++; if (rfr[{6'd3, RW'(r)}] !== pat(8 + r)) failures++; end
    // StoreRes: register 3 -> HBM rows 20..23
    uop.op = OP_STORE; uop.src0 = 3; uop.out_addr = 20;
    run(uop);
    repeat (2) @(negedge clk);
    for (int r = 0; r < ROWS; r++) begin checks++; if (u_hbm.mem[20 + r] !== pat(8 + r)) failures++; end
    // VecCopy: register 3 -> register 5
    uop.op = OP_VCOPY; uop.src0 = 3; uop.dest = 5;
    run(uop);
    for (int r = 0; r < ROWS; r++) begin checks++; if (rfr[{6'd5, RW'(r)}] !== pat(8 + r)) failures++; end
    // concurrent: stream-in from row 30, stream-out to rows 40.., LoadRes rows 50.. -> reg 7
    @(negedge clk); si_addr = 30; si_start = 1; so_addr = 40; so_start = 1;
    @(negedge clk); si_start = 0; so_start = 0;
    uop.op = OP_LOAD; uop.dest = 7; uop.in_addr = 50;
    fork
      run(uop);
      begin  // slow consumer
        repeat (12) @(negedge clk);
        while (got.size() < ROWS) begin
          si_pop = 0;
          if (si_valid && ($urandom % 3 == 0)) begin si_pop = 1; got.push_back(si_data); end
          @(negedge clk);
        end
        si_pop = 0;
      end
      begin
        for (int r = 0; r < ROWS; r++) begin
          while (!so_space_ok) @(negedge clk);
          so_push = 1; so_data = pat(100 + r); @(negedge clk); so_push = 0;
        end
      end
    join
    while (so_busy || si_busy) @(negedge clk);
    repeat (2) @(negedge clk);
    for (int r = 0; r < ROWS; r++) begin
      checks++; if (got[r] !== pat(30 + r)) failures++;
      checks++; if (u_hbm.mem[40 + r] !== pat(100 + r)) failures++;
      checks++; if (rfr[{6'd7, RW'(r)}] !== pat(50 + r)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
