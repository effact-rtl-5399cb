// Self-checking testbench for stream_fifo: random pushes and pops (never into a full or
// out of an empty FIFO) checked against a queue model for order, occupancy and flags,
// including simultaneous push and pop while full.
module tb_stream_fifo;
  localparam int unsigned W = 40, D = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic push, pop, valid, full;
  logic [W-1:0] din, dout;
  logic [2:0] count;
  logic [W-1:0] model[$];
  int fulls = 0;
  stream_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    push = 0; pop = 0; din = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      checks++; if (count != model.size() || valid != (model.size() > 0) || full != (model.size() == D)) failures++;
      if (valid) begin checks++; if (dout !== model[0]) failures++; end
      if (full) fulls++;
      pop  = valid && ($urandom % 3 != 0);
      push = (!full || pop) && ($urandom % 2 == 0 || i % 50 < 10);
      din  = {$urandom, $urandom};
      @(posedge clk); #1;
      if (pop) void'(model.pop_front());
      if (push) model.push_back(din);
      @(negedge clk); push = 0; pop = 0;
    end
    checks++; if (fulls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
