// mem_ctrl: memory controller of the memory system. It moves rows between the HBM,
// the register-file SRAM and the streaming FIFOs.
//
// Four engines share the HBM channel through hbm_arbiter:
//   load   (LoadRes)  reads ROWS rows from HBM row in_addr and writes them to register dest
//   store  (StoreRes) reads register src0 and writes it to HBM from row out_addr on
//   stream-in          reads ROWS rows from HBM into the inbound streaming FIFO, for an
//                      instruction whose second operand streams from DRAM; it only asks
//                      for rows the FIFO has room for, so responses never overflow it
//   stream-out         drains the outbound streaming FIFO, filled by a function unit
//                      whose result streams to DRAM, into HBM rows out_addr, out_addr+1, ...
// VecCopy (register to register) uses the load/store engine's register-file ports.
// Load, store and copy form one function unit that runs one instruction at a time
// (start/busy/done like the other units); the two stream engines run beside it and
// are started by the control core when it issues a streamed instruction.
//
// This is the paper's streaming memory access: a merged "load + operation" takes its
// operand rows straight from HBM as they arrive, and an "operation + store" sends its
// result rows straight out, so neither needs a register in the SRAM. The paper names a
// memory controller, an arbiter and the FIFO space; the engine split, the credit rule
// and the FIFO depth are this design's choices. HBM addresses count rows of LANES words.
module mem_ctrl
  import effact_pkg::*;
#(
  parameter int unsigned LANES      = 1024,
  parameter int unsigned LOG_N      = 16,
  parameter int unsigned LOG_LANES  = $clog2(LANES),
  parameter int unsigned ROW_W      = LOG_N - LOG_LANES,
  parameter int unsigned RA_W       = REG_W + ROW_W,
  parameter int unsigned FIFO_DEPTH = 8,
  parameter int unsigned TAGS       = 16,
  parameter int unsigned DW         = LANES * WORD_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // load / store / copy unit
  input  logic                          start,
  input  uop_t                          uop,
  output logic                          busy,
  output logic                          done,
  output logic [RA_W-1:0]               ra_addr,
  input  logic [LANES-1:0][WORD_W-1:0]  ra_data,
  output logic                          w_en,
  output logic [RA_W-1:0]               w_addr,
  output logic [LANES-1:0][WORD_W-1:0]  w_data,
  // stream-in engine and inbound FIFO
  input  logic                          si_start,
  input  haddr_t                        si_addr,
  output logic                          si_busy,
  output logic                          si_valid,
  output logic [LANES-1:0][WORD_W-1:0]  si_data,
  input  logic                          si_pop,
  // stream-out engine and outbound FIFO
  input  logic                          so_start,
  input  haddr_t                        so_addr,
  output logic                          so_busy,
  input  logic                          so_push,
  input  logic [LANES-1:0][WORD_W-1:0]  so_data,
  output logic                          so_space_ok,
  // HBM channel
  output logic                          hbm_valid,
  input  logic                          hbm_ready,
  output logic                          hbm_we,
  output haddr_t                        hbm_addr,
  output logic [DW-1:0]                 hbm_wdata,
  input  logic                          hbm_rvalid,
  input  logic [DW-1:0]                 hbm_rdata
);
  localparam int unsigned ROWS  = 1 << ROW_W;
  localparam int unsigned CNT_W = $clog2(FIFO_DEPTH + 1);

  logic [3:0]             rq_valid, rq_we, rq_ready, rsp_valid;
  logic [3:0][HADDR_W-1:0] rq_addr;
  logic [3:0][DW-1:0]     rq_wdata;
  logic [DW-1:0]          rsp_data;

  hbm_arbiter #(.NREQ(4), .DW(DW), .TAGS(TAGS)) u_arb (
    .clk, .rst_n, .req_valid(rq_valid), .req_we(rq_we), .req_addr(rq_addr),
    .req_wdata(rq_wdata), .req_ready(rq_ready), .rsp_valid(rsp_valid), .rsp_data(rsp_data),
    .hbm_valid, .hbm_ready, .hbm_we, .hbm_addr, .hbm_wdata, .hbm_rvalid, .hbm_rdata);

  // ---------------- load / store / copy ----------------
  uop_t            cur;
  logic [ROW_W:0]  req_cnt, rsp_cnt, rd_cnt;
  logic            rd_pend, hold_v, vc_v;
  logic [ROW_W-1:0] vc_row, hold_row;
  logic [LANES-1:0][WORD_W-1:0] hold;
  logic            is_ld, is_st, is_vc, st_issue, vc_issue;

  assign is_ld = busy && cur.op == OP_LOAD;
  assign is_st = busy && cur.op == OP_STORE;
  assign is_vc = busy && cur.op == OP_VCOPY;

  assign rq_valid[0] = is_ld && req_cnt < ROWS;
  assign rq_we[0]    = 1'b0;
  assign rq_addr[0]  = cur.in_addr + HADDR_W'(req_cnt);
  assign rq_wdata[0] = '0;

  assign rq_valid[1] = is_st && hold_v;
  assign rq_we[1]    = 1'b1;
  assign rq_addr[1]  = cur.out_addr + HADDR_W'(hold_row);
  assign rq_wdata[1] = hold;

  assign st_issue = is_st && rd_cnt < ROWS && !rd_pend && (!hold_v || rq_ready[1]);
  assign vc_issue = is_vc && rd_cnt < ROWS;
  assign ra_addr  = {cur.src0, ROW_W'(rd_cnt)};

  always_comb begin
    w_en = 1'b0; w_addr = '0; w_data = rsp_data;
    if (is_ld && rsp_valid[0]) begin
      w_en = 1'b1; w_addr = {cur.dest, ROW_W'(rsp_cnt)};
    end else if (vc_v) begin
      w_en = 1'b1; w_addr = {cur.dest, vc_row}; w_data = ra_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; cur <= '0; req_cnt <= '0; rsp_cnt <= '0; rd_cnt <= '0;
      rd_pend <= 1'b0; hold_v <= 1'b0; hold <= '0; hold_row <= '0; vc_v <= 1'b0; vc_row <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        cur <= uop; busy <= 1'b1; req_cnt <= '0; rsp_cnt <= '0; rd_cnt <= '0;
      end
      if (rq_valid[0] && rq_ready[0]) req_cnt <= req_cnt + 1'b1;
      if (is_ld && rsp_valid[0])       rsp_cnt <= rsp_cnt + 1'b1;
      // store: one register read in flight, one row held for the HBM
      if (rq_valid[1] && rq_ready[1]) begin hold_v <= 1'b0; rsp_cnt <= rsp_cnt + 1'b1; end
      rd_pend <= st_issue;
      if (st_issue || vc_issue) rd_cnt <= rd_cnt + 1'b1;
      if (rd_pend) begin hold <= ra_data; hold_v <= 1'b1; hold_row <= ROW_W'(rd_cnt - 1'b1); end
      vc_v   <= vc_issue;
      vc_row <= ROW_W'(rd_cnt);
      if (busy && ((cur.op == OP_VCOPY) ? (rd_cnt == ROWS && !vc_v) : (rsp_cnt == ROWS)) &&
          !(start && !busy)) begin
        busy <= 1'b0; done <= 1'b1;
      end
    end
  end

  // ---------------- stream-in ----------------
  haddr_t           si_base;
  logic [ROW_W:0]   si_req;
  logic [CNT_W:0]   si_out;       // reads in flight
  logic [CNT_W-1:0] si_cnt;
  logic             si_full;

  assign rq_valid[2] = si_busy && si_req < ROWS &&
                       (32'(si_cnt) + 32'(si_out)) < FIFO_DEPTH;
  assign rq_we[2]    = 1'b0;
  assign rq_addr[2]  = si_base + HADDR_W'(si_req);
  assign rq_wdata[2] = '0;

  stream_fifo #(.WIDTH(DW), .DEPTH(FIFO_DEPTH)) u_si_fifo (
    .clk, .rst_n, .push(rsp_valid[2]), .din(rsp_data), .pop(si_pop), .dout(si_data),
    .valid(si_valid), .full(si_full), .count(si_cnt));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      si_busy <= 1'b0; si_base <= '0; si_req <= '0; si_out <= '0;
    end else begin
      if (si_start && !si_busy) begin si_busy <= 1'b1; si_base <= si_addr; si_req <= '0; end
      if (rq_valid[2] && rq_ready[2]) si_req <= si_req + 1'b1;
      si_out <= si_out + (CNT_W+1)'(rq_valid[2] && rq_ready[2]) - (CNT_W+1)'(rsp_valid[2]);
      if (si_busy && si_req == ROWS && si_out == 0) si_busy <= 1'b0;
    end
  end

  // ---------------- stream-out ----------------
  haddr_t           so_base;
  logic [ROW_W:0]   so_sent;
  logic             so_valid, so_full;
  logic [CNT_W-1:0] so_cnt;
  logic [LANES-1:0][WORD_W-1:0] so_head;

  stream_fifo #(.WIDTH(DW), .DEPTH(FIFO_DEPTH)) u_so_fifo (
    .clk, .rst_n, .push(so_push), .din(so_data), .pop(rq_valid[3] && rq_ready[3]),
    .dout(so_head), .valid(so_valid), .full(so_full), .count(so_cnt));

  assign so_space_ok = (32'(FIFO_DEPTH) - 32'(so_cnt)) >= 3;
  assign rq_valid[3] = so_busy && so_valid;
  assign rq_we[3]    = 1'b1;
  assign rq_addr[3]  = so_base + HADDR_W'(so_sent);
  assign rq_wdata[3] = so_head;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      so_busy <= 1'b0; so_base <= '0; so_sent <= '0;
    end else begin
      if (so_start && !so_busy) begin so_busy <= 1'b1; so_base <= so_addr; so_sent <= '0; end
      if (rq_valid[3] && rq_ready[3]) so_sent <= so_sent + 1'b1;
      if (so_busy && so_sent == ROWS) so_busy <= 1'b0;
    end
  end
endmodule
