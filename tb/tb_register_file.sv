// Self-checking testbench for register_file: random writes on all write ports (to
// distinct rows) and random reads on all read ports, checked against a model with
// one cycle of read latency and read-before-write behaviour.
module tb_register_file;
  import effact_pkg::*;
  localparam int unsigned L = 2, LN = 3, RW = 2, RA = REG_W + RW, NR = 9, NW = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [NR-1:0][RA-1:0] rd_addr;
  logic [NR-1:0][L-1:0][WORD_W-1:0] rd_data;
  logic [NW-1:0] wr_en;
  logic [NW-1:0][RA-1:0] wr_addr;
  logic [NW-1:0][L-1:0][WORD_W-1:0] wr_data;
  logic [L-1:0][WORD_W-1:0] model [1 << RA];
  logic [NR-1:0][L-1:0][WORD_W-1:0] exp_d;
  register_file #(.LANES(L), .LOG_N(LN)) dut (.*);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    wr_en = '0; rd_addr = '0; wr_addr = '0; wr_data = '0;
    // fill every row through port 0
    for (int a = 0; a < (1 << RA); a++) begin
      @(negedge clk); wr_en = 1; wr_addr[0] = RA'(a); wr_data[0] = {$urandom, $urandom, $urandom, $urandom};
      model[a] = wr_data[0];
    end
    @(negedge clk); wr_en = '0;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      for (int r = 0; r < NR; r++) begin
        rd_addr[r] = RA'($urandom); exp_d[r] = model[rd_addr[r]];
      end
      for (int w = 0; w < NW; w++) begin
        wr_en[w] = $urandom % 2; wr_addr[w] = RA'(w * 40 + ($urandom % 40));
        wr_data[w] = {$urandom, $urandom, $urandom, $urandom};
      end
      @(posedge clk); #1;
      for (int w = 0; w < NW; w++) if (wr_en[w]) model[wr_addr[w]] = wr_data[w];
      for (int r = 0; r < NR; r++) begin checks++; if (rd_data[r] !== exp_d[r]) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
