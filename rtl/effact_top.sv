// effact_top: the EFFACT accelerator - control core, memory system and compute system.
//
// Blocks and their connections:
//   ooo_core      fetches from the icache, runs the scalar subset, issues micro-ops to
//                 five units through a scoreboard (out of order) and starts the stream
//                 engines for streamed instructions
//   icache        program store, loaded by the host
//   register_file on-chip SRAM, 64 limb registers of N/LANES rows, 9 read / 6 write ports
//   mod_add_unit  MADDU   (ports: rd 0,1  wr 0)   MMAD
//   mod_mult_unit MMULU   (ports: rd 2,3  wr 1)   MMUL
//   ntt_unit      NTTU    (ports: rd 4-6  wr 2,3) NTT, iNTT, MAC; twiddle memory
//   auto_unit     AUTOU   (ports: rd 7    wr 4)   AUTO
//   mem_ctrl      memory controller (ports: rd 8 wr 5): LoadRes, StoreRes, VecCopy,
//                 stream-in and stream-out FIFOs, HBM arbiter
// MADDU and MMULU can take their second operand from the inbound streaming FIFO and send
// their result to the outbound one; only one streamed instruction of each kind runs at a
// time, so the FIFO handshakes are simply OR-ed between the two units.
//
// External interfaces: a host port (program load, modulus table, twiddle memory, run,
// halted), one HBM channel of one row (LANES x 54 bits) per transfer with in-order read
// responses, and three observation counters from the core. The HBM itself, the host and
// the FPGA-only Ethernet/UDP link are outside this module.
//
// Defaults are the ASIC configuration of the paper: 1024 lanes, N = 2^16, 54-bit words,
// 64 limb registers (27 MB). Its 2048 modular multipliers are the 1024 butterflies of
// the NTT unit plus the 1024 lanes of the multiply unit; its 3072 modular adders are the
// butterflies' adders and subtractors plus the 1024 lanes of the add unit.
module effact_top
  import effact_pkg::*;
#(
  parameter int unsigned LANES      = 1024,
  parameter int unsigned LOG_N      = 16,
  parameter int unsigned WIN        = 4,
  parameter int unsigned IC_AW      = 12,
  parameter int unsigned FIFO_DEPTH = 8,
  parameter int unsigned LOG_LANES  = $clog2(LANES),
  parameter int unsigned ROW_W      = LOG_N - LOG_LANES,
  parameter int unsigned RA_W       = REG_W + ROW_W,
  parameter int unsigned DW         = LANES * WORD_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // host
  input  logic                          run,
  output logic                          halted,
  input  logic                          ic_we,
  input  logic [IC_AW-1:0]              ic_waddr,
  input  instr_t                        ic_wdata,
  input  logic                          mt_we,
  input  logic [MOD_W-1:0]              mt_idx,
  input  word_t                         mt_q,
  input  word_t                         mt_qinv,
  input  logic                          tf_we,
  input  logic [ROW_W:0]                tf_addr,
  input  logic [LANES-1:0][WORD_W-1:0]  tf_wdata,
  // HBM channel
  output logic                          hbm_valid,
  input  logic                          hbm_ready,
  output logic                          hbm_we,
  output haddr_t                        hbm_addr,
  output logic [DW-1:0]                 hbm_wdata,
  input  logic                          hbm_rvalid,
  input  logic [DW-1:0]                 hbm_rdata,
  // observation
  output logic [31:0]                   n_issued,
  output logic [31:0]                   n_ooo,
  output logic [31:0]                   n_stall
);
  typedef logic [LANES-1:0][WORD_W-1:0] row_t;

  logic [IC_AW-1:0] ic_addr;
  instr_t           ic_data;
  uop_t             uop;
  logic [4:0]       fu_start, fu_busy, fu_done;
  logic             si_start, so_start, si_busy, so_busy;
  haddr_t           si_addr, so_addr;

  logic [8:0][RA_W-1:0] rd_addr;
  row_t [8:0]           rd_data;
  logic [5:0]           wr_en;
  logic [5:0][RA_W-1:0] wr_addr;
  row_t [5:0]           wr_data;

  logic si_valid, si_pop_a, si_pop_m, so_push_a, so_push_m, so_space_ok;
  row_t si_data, so_data_a, so_data_m;

  ooo_core #(.WIN(WIN), .IC_AW(IC_AW)) u_core (
    .clk, .rst_n, .run, .halted, .ic_addr, .ic_data, .mt_we, .mt_idx, .mt_q, .mt_qinv,
    .uop_o(uop), .fu_start, .fu_busy, .fu_done, .si_start, .si_addr, .si_busy,
    .so_start, .so_addr, .so_busy, .n_issued, .n_ooo, .n_stall);

  icache #(.DEPTH(1 << IC_AW)) u_icache (
    .clk, .rd_addr(ic_addr), .rd_data(ic_data), .wr_en(ic_we), .wr_addr(ic_waddr),
    .wr_data(ic_wdata));

  register_file #(.LANES(LANES), .LOG_N(LOG_N), .NR(9), .NW(6)) u_rf (
    .clk, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data);

  mod_add_unit #(.LANES(LANES), .LOG_N(LOG_N)) u_madd (
    .clk, .rst_n, .start(fu_start[0]), .uop, .busy(fu_busy[0]), .done(fu_done[0]),
    .ra_addr(rd_addr[0]), .ra_data(rd_data[0]), .rb_addr(rd_addr[1]), .rb_data(rd_data[1]),
    .w_en(wr_en[0]), .w_addr(wr_addr[0]), .w_data(wr_data[0]),
    .si_valid, .si_data, .si_pop(si_pop_a), .so_push(so_push_a), .so_data(so_data_a),
    .so_space_ok);

  mod_mult_unit #(.LANES(LANES), .LOG_N(LOG_N)) u_mmul (
    .clk, .rst_n, .start(fu_start[1]), .uop, .busy(fu_busy[1]), .done(fu_done[1]),
    .ra_addr(rd_addr[2]), .ra_data(rd_data[2]), .rb_addr(rd_addr[3]), .rb_data(rd_data[3]),
    .w_en(wr_en[1]), .w_addr(wr_addr[1]), .w_data(wr_data[1]),
    .si_valid, .si_data, .si_pop(si_pop_m), .so_push(so_push_m), .so_data(so_data_m),
    .so_space_ok);

  ntt_unit #(.LANES(LANES), .LOG_N(LOG_N)) u_ntt (
    .clk, .rst_n, .start(fu_start[2]), .uop, .busy(fu_busy[2]), .done(fu_done[2]),
    .ra_addr(rd_addr[4]), .ra_data(rd_data[4]), .rb_addr(rd_addr[5]), .rb_data(rd_data[5]),
    .rc_addr(rd_addr[6]), .rc_data(rd_data[6]),
    .wa_en(wr_en[2]), .wa_addr(wr_addr[2]), .wa_data(wr_data[2]),
    .wb_en(wr_en[3]), .wb_addr(wr_addr[3]), .wb_data(wr_data[3]),
    .tf_we, .tf_addr, .tf_wdata);

  auto_unit #(.LANES(LANES), .LOG_N(LOG_N)) u_auto (
    .clk, .rst_n, .start(fu_start[3]), .uop, .busy(fu_busy[3]), .done(fu_done[3]),
    .ra_addr(rd_addr[7]), .ra_data(rd_data[7]),
    .w_en(wr_en[4]), .w_addr(wr_addr[4]), .w_data(wr_data[4]));

  mem_ctrl #(.LANES(LANES), .LOG_N(LOG_N), .FIFO_DEPTH(FIFO_DEPTH)) u_mem (
    .clk, .rst_n, .start(fu_start[4]), .uop, .busy(fu_busy[4]), .done(fu_done[4]),
    .ra_addr(rd_addr[8]), .ra_data(rd_data[8]),
    .w_en(wr_en[5]), .w_addr(wr_addr[5]), .w_data(wr_data[5]),
    .si_start, .si_addr, .si_busy, .si_valid, .si_data, .si_pop(si_pop_a | si_pop_m),
    .so_start, .so_addr, .so_busy, .so_push(so_push_a | so_push_m),
    .so_data(so_push_a ? so_data_a : so_data_m), .so_space_ok,
    .hbm_valid, .hbm_ready, .hbm_we, .hbm_addr, .hbm_wdata, .hbm_rvalid, .hbm_rdata);

  a_one_stream_reader: assert property (@(posedge clk) disable iff (!rst_n) !(si_pop_a && si_pop_m));
  a_one_stream_writer: assert property (@(posedge clk) disable iff (!rst_n) !(so_push_a && so_push_m));
endmodule
