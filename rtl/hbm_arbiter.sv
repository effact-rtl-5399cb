// hbm_arbiter: arbitration of the HBM channel among the memory-system requesters.
//
// The paper lets the SRAM path and the streaming FIFOs compete for DRAM transfers so
// that a slow consumer (a streamed NTT, say) does not leave HBM bandwidth idle. NREQ
// requesters (here: register-file loads, register-file stores, stream-in reads,
// stream-out writes) each present a row request (we, row address, write data); a
// round-robin pointer picks one per cycle when the HBM accepts a request. Reads record
// the winner's index in a tag FIFO; HBM returns read data in request order, and each
// response is steered to the requester named at the head of that FIFO. When TAGS reads
// are outstanding, read requests wait.
// rsp_data is the HBM read data itself, shared by all requesters; only rsp_valid is
// steered, so a netlist shows rsp_data as wired straight to an input.
// The paper also draws an arbiter between the units and the SRAM banks; this design
// gives each unit its own register-file ports instead, so only HBM is arbitrated here.
//
// Handshake: a request moves when req_valid and req_ready are both high; req_ready is
// high for the granted requester only. Responses have no back-pressure: a requester
// must only ask for rows it can take. The policy (round robin) and the tag depth are
// this design's choices; the paper names the arbiter but not its policy.
module hbm_arbiter
  import effact_pkg::*;
#(
  parameter int unsigned NREQ  = 4,
  parameter int unsigned DW    = 1024 * 54,
  parameter int unsigned TAGS  = 16,
  parameter int unsigned IDX_W = (NREQ > 1) ? $clog2(NREQ) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [NREQ-1:0]               req_valid,
  input  logic [NREQ-1:0]               req_we,
  input  logic [NREQ-1:0][HADDR_W-1:0]  req_addr,
  input  logic [NREQ-1:0][DW-1:0]       req_wdata,
  output logic [NREQ-1:0]               req_ready,
  output logic [NREQ-1:0]               rsp_valid,
  output logic [DW-1:0]                 rsp_data,
  // HBM side
  output logic                          hbm_valid,
  input  logic                          hbm_ready,
  output logic                          hbm_we,
  output logic [HADDR_W-1:0]            hbm_addr,
  output logic [DW-1:0]                 hbm_wdata,
  input  logic                          hbm_rvalid,
  input  logic [DW-1:0]                 hbm_rdata
);
  localparam int unsigned TP_W = $clog2(TAGS);
  logic [IDX_W-1:0] ptr, gnt;
  logic             any;
  logic [IDX_W-1:0] tag_q [TAGS];
  logic [TP_W-1:0]  trp, twp;
  logic [TP_W:0]    tcnt;
  logic [NREQ-1:0]  elig;

  always_comb begin
    for (int unsigned i = 0; i < NREQ; i++)
      elig[i] = req_valid[i] && (req_we[i] || tcnt < (TP_W+1)'(TAGS));
    any = 1'b0; gnt = ptr;
    for (int unsigned o = 0; o < NREQ; o++) begin
      int unsigned i;
      i = (int'(ptr) + o) % NREQ;
      if (!any && elig[i]) begin any = 1'b1; gnt = IDX_W'(i); end
    end
  end

  assign hbm_valid = any;
  assign hbm_we    = req_we[gnt];
  assign hbm_addr  = req_addr[gnt];
  assign hbm_wdata = req_wdata[gnt];
  always_comb begin
    req_ready = '0;
    if (any) req_ready[gnt] = hbm_ready;
    rsp_valid = '0;
    if (hbm_rvalid) rsp_valid[tag_q[trp]] = 1'b1;
  end
  assign rsp_data = hbm_rdata;

  logic issue_rd;
  assign issue_rd = any && hbm_ready && !req_we[gnt];

  always_ff @(posedge clk) if (issue_rd) tag_q[twp] <= gnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr <= '0; trp <= '0; twp <= '0; tcnt <= '0;
    end else begin
      if (any && hbm_ready) ptr <= IDX_W'((int'(gnt) + 1) % NREQ);
      if (issue_rd) twp <= twp + 1'b1;
      if (hbm_rvalid) trp <= trp + 1'b1;
      tcnt <= tcnt + (TP_W+1)'(issue_rd) - (TP_W+1)'(hbm_rvalid);
    end
  end

  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n) hbm_rvalid |-> tcnt != 0);
endmodule
