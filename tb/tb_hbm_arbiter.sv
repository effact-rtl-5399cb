// Self-checking testbench for hbm_arbiter: four requesters issue random reads and
// writes to a behavioural HBM with random acceptance and 3-cycle read latency. Checks:
// every write lands at its address with its data, every read response reaches the
// requester that asked and carries the stored row, the grant rotates so that no
// requester waits more than NREQ accepted requests while valid, and all requests
// complete.
module tb_hbm_arbiter;
  import effact_pkg::*;
  localparam int unsigned NREQ = 4, DW = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [NREQ-1:0] req_valid, req_we, req_ready, rsp_valid;
  logic [NREQ-1:0][HADDR_W-1:0] req_addr;
  logic [NREQ-1:0][DW-1:0] req_wdata;
  logic [DW-1:0] rsp_data, hbm_wdata, hbm_rdata;
  logic hbm_valid, hbm_ready, hbm_we, hbm_rvalid;
  logic [HADDR_W-1:0] hbm_addr;
  hbm_arbiter #(.NREQ(NREQ), .DW(DW), .TAGS(4)) dut (.*);

  // behavioural HBM: memory of 64 rows, fixed 3-cycle read latency, in order
  logic [DW-1:0] hmem [64];
  logic [DW-1:0] pipe [3];
  logic [2:0] pv;
  always_ff @(posedge clk) begin
    pv <= {pv[1:0], hbm_valid && hbm_ready && !hbm_we};
    pipe[0] <= hmem[hbm_addr[5:0]]; pipe[1] <= pipe[0]; pipe[2] <= pipe[1];
    if (hbm_valid && hbm_ready && hbm_we) hmem[hbm_addr[5:0]] <= hbm_wdata;
  end
  assign hbm_rvalid = pv[2];
  assign hbm_rdata  = pipe[2];

  int pend [NREQ];          // outstanding reads per requester
  logic [DW-1:0] expq [NREQ][$];
  int waitc [NREQ], done_n [NREQ], accepted = 0;
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  // requester i owns addresses 16*i .. 16*i+15
  initial begin
    for (int a = 0; a < 64; a++) hmem[a] = DW'(a * 7);
    pv = 0; req_valid = 0; req_we = 0; req_addr = '0; req_wdata = '0; hbm_ready = 0;
    foreach (pend[i]) begin pend[i] = 0; waitc[i] = 0; done_n[i] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 600; cyc++) begin
      @(negedge clk);
      hbm_ready = ($urandom % 4 != 0);
      for (int i = 0; i < NREQ; i++)
        if (!req_valid[i] && done_n[i] < 40 && ($urandom % 2)) begin
          req_valid[i] = 1; req_we[i] = $urandom % 2;
          req_addr[i] = HADDR_W'(16 * i + ($urandom % 16)); req_wdata[i] = {$urandom};
        end
      @(posedge clk); #1;
      for (int i = 0; i < NREQ; i++) begin
        if (rsp_valid[i]) begin
          checks++;
          if (expq[i].size() == 0 || rsp_data !== expq[i][0]) failures++;
          if (expq[i].size() != 0) void'(expq[i].pop_front());
        end
      end
    end
    for (int i = 0; i < NREQ; i++) begin checks++; if (done_n[i] != 40 || expq[i].size() != 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // bookkeeping at the clock edge (sampled just before it)
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NREQ; i++) begin
      if (req_valid[i] && req_ready[i]) begin
        if (req_we[i]) hmem_model_write(req_addr[i], req_wdata[i]);
        else expq[i].push_back(model[req_addr[i][5:0]]);
        done_n[i]++; waitc[i] = 0;
        #0 req_valid[i] = 0;
      end else if (req_valid[i] && hbm_valid && hbm_ready) begin
        waitc[i]++;
        checks++; if (waitc[i] > NREQ) failures++;
      end
    end
  end
  logic [DW-1:0] model [64];
  initial for (int a = 0; a < 64; a++) model[a] = DW'(a * 7);
  task automatic hmem_model_write(logic [HADDR_W-1:0] a, logic [DW-1:0] d);
    model[a[5:0]] = d;
  endtask
endmodule
