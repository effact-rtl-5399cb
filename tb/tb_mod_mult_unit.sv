// Self-checking testbench for mod_mult_unit (MMULU).
// A 4-lane, 16-coefficient instance is driven through vector, immediate and streamed
// operations. The register file and both streaming FIFOs are modelled here; results
// are checked lane by lane against a Montgomery product: r * 2^54 must equal a * b modulo q, worked
// out with 128-bit integers, and an
// unstalled operation must take N/LANES + 3 cycles (one row per cycle).
module tb_mod_mult_unit;
  import effact_pkg::*;
  localparam int unsigned L = 4, LN = 4, RW = LN - 2, RA = REG_W + RW, ROWS = 1 << RW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, w_en, si_valid, si_pop, so_push, so_space_ok;
  uop_t uop;
  logic [RA-1:0] ra_addr, rb_addr, w_addr;
  logic [L-1:0][WORD_W-1:0] ra_data, rb_data, w_data, si_data, so_data;
  logic [L-1:0][WORD_W-1:0] sq[$], oq[$];
  logic stream_on;

  mod_mult_unit #(.LANES(L), .LOG_N(LN)) dut (.*);

  // row-wide register-file model, 1-cycle read latency
  logic [L-1:0][WORD_W-1:0] rfr [0:(1<<RA)-1];
  always_ff @(posedge clk) begin
    ra_data <= rfr[ra_addr];
    rb_data <= rfr[rb_addr];
    if (w_en) rfr[w_addr] <= w_data;
    if (so_push) oq.push_back(so_data);
  end
  assign si_valid = (sq.size() > 0) && stream_on;
  assign si_data  = (sq.size() > 0) ? sq[0] : '0;
  always @(posedge clk) if (si_pop) void'(sq.pop_front());
  assign so_space_ok = 1'b1;

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // Montgomery reference: the result r must satisfy r < q and r * 2^54 = a * b (mod q)
  function automatic bit mont_ok(word_t r, word_t a, word_t b, word_t q);
    logic [127:0] lhs, rhs;
    lhs = (128'(r) << 54) % 128'(q);
    rhs = (128'(a) * 128'(b)) % 128'(q);
    return (r < q) && (lhs == rhs);
  endfunction

  // -q^-1 mod 2^54 by Newton iteration (q odd)
  function automatic word_t qinv_of(word_t q);
    longint unsigned x; x = 1;
    for (int i = 0; i < 7; i++) x = x * (2 - longint'(q) * x);
    return word_t'(-x);
  endfunction

  task automatic run(uop_t u, output int cyc);
    @(negedge clk); uop = u; start = 1; @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  word_t q, a [ROWS*L], b [ROWS*L];
  int cyc;
  initial begin
    start = 0; uop = '0; stream_on = 1;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      q = (t == 0) ? 54'd998244353 : (t == 1) ? 54'h3FFFFFFFFFFFC5 : 54'd17;
      for (int i = 0; i < ROWS*L; i++) begin
        a[i] = word_t'({$urandom, $urandom}) % q; b[i] = word_t'({$urandom, $urandom}) % q;
        rfr[{6'd3, RW'(i / L)}][i % L] = a[i];
        rfr[{6'd5, RW'(i / L)}][i % L] = b[i];
      end
      // vector add
      uop = '0; uop.op = OP_MMUL; uop.src0 = 3; uop.src1 = 5; uop.dest = 7; uop.q = q; uop.qinv = qinv_of(q);
      run(uop, cyc);
      checks++; if (cyc != ROWS + 4) begin failures++; $display("latency %0d", cyc); end
      for (int i = 0; i < ROWS*L; i++) begin
        checks++; if (!mont_ok(rfr[{6'd7, RW'(i / L)}][i % L], a[i], b[i], q)) failures++;
      end
      // immediate add
      uop.imm_f = 1; uop.imm = b[0]; uop.dest = 9;
      run(uop, cyc);
      for (int i = 0; i < ROWS*L; i++) begin
        checks++; if (!mont_ok(rfr[{6'd9, RW'(i / L)}][i % L], a[i], b[0], q)) failures++;
      end
      // streamed operand in, streamed result out, with the stream arriving late
      uop.imm_f = 0; uop.s1_stream = 1; uop.d_stream = 1;
      for (int r = 0; r < ROWS; r++) begin
        logic [L-1:0][WORD_W-1:0] row;
        for (int l = 0; l < L; l++) row[l] = b[(ROWS-1-r)*L + l];
        sq.push_back(row);
      end
      stream_on = 0;
      fork
        run(uop, cyc);
        begin repeat (6) @(negedge clk); stream_on = 1; end
      join
      checks++; if (cyc <= ROWS + 4) failures++;   // the stall must show
      checks++; if (oq.size() != ROWS) failures++;
      for (int r = 0; r < ROWS && r < oq.size(); r++)
        for (int l = 0; l < L; l++) begin
          checks++;
          if (!mont_ok(oq[r][l], a[r*L+l], b[(ROWS-1-r)*L+l], q)) failures++;
        end
      oq.delete();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
