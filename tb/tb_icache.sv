// Self-checking testbench for icache: the host port writes random instruction words,
// the fetch port reads them back in random order with one cycle of latency.
module tb_icache;
  import effact_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [5:0] rd_addr, wr_addr;
  instr_t rd_data, wr_data, model [64];
  logic wr_en;
  icache #(.DEPTH(64)) dut (.*);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    wr_en = 0; rd_addr = '0; wr_addr = '0; wr_data = '0;
    for (int a = 0; a < 64; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = 6'(a);
      wr_data = instr_t'({$urandom, $urandom, $urandom, $urandom}); model[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk); rd_addr = 6'($urandom);
      @(posedge clk); #1; checks++; if (rd_data !== model[rd_addr]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
