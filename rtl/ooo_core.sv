// ooo_core: the out-of-order control core. It fetches instructions from the icache,
// runs the scalar subset itself, and issues vector instructions to the function units
// as soon as their operands and unit are free, tracking dependences with a scoreboard.
//
// Front end (in order). The fetch stage reads the icache (one cycle). Decode executes
// scalar instructions on the spot (SADDI: s[dest] = s[src0] + imm; SBNE: branch by imm
// when s[dest] != s[src0]; HALT stops fetching), so loops and address arithmetic never
// enter the window and branches need no prediction. Vector instructions are decoded
// into micro-ops: the modulus index is replaced by (q, -q^-1 mod 2^54) from the modulus
// table, and HBM row addresses are formed from scalar registers (LoadRes:
// s[src0] + imm; StoreRes: s[dest] + imm; streamed operand: s[src1]; streamed result:
// s[dest]). Decoded micro-ops enter an issue window of WIN entries in program order.
//
// Scoreboard (out of order). Every micro-op carries a read mask and a write mask over
// the 64 vector registers plus one bit standing for HBM (loads and stream reads read
// it, stores and stream writes write it, so memory accesses keep their program order).
// Each cycle the oldest window entry is issued whose unit is idle, that has no
// read-after-write, write-after-read or write-after-write conflict with an older
// waiting entry or with an instruction still executing, and whose stream engine is
// free. One instruction issues per cycle; younger ones pass blocked older ones, which
// is what lets loads, NTTs and element-wise work overlap. Units: 0 MADD, 1 MMUL,
// 2 NTT (NTT, iNTT, MAC), 3 AUTO, 4 memory (LoadRes, StoreRes, VecCopy).
//
// Counters n_issued, n_ooo (issues that passed an older entry) and n_stall (cycles
// with a non-empty window and no issue) are outputs for observation.
// The paper gives the scoreboard-based OoO issue, the ISA and the scalar subset; the
// window size, the in-order scalar front end and the encodings are this design's.
module ooo_core
  import effact_pkg::*;
#(
  parameter int unsigned WIN    = 4,
  parameter int unsigned IC_AW  = 12,
  parameter int unsigned NFU    = 5,
  parameter int unsigned NMOD   = 1 << MOD_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 run,
  output logic                 halted,
  output logic [IC_AW-1:0]     ic_addr,
  input  instr_t               ic_data,
  input  logic                 mt_we,
  input  logic [MOD_W-1:0]     mt_idx,
  input  word_t                mt_q,
  input  word_t                mt_qinv,
  output uop_t                 uop_o,
  output logic [NFU-1:0]       fu_start,
  input  logic [NFU-1:0]       fu_busy,
  input  logic [NFU-1:0]       fu_done,
  output logic                 si_start,
  output haddr_t               si_addr,
  input  logic                 si_busy,
  output logic                 so_start,
  output haddr_t               so_addr,
  input  logic                 so_busy,
  output logic [31:0]          n_issued,
  output logic [31:0]          n_ooo,
  output logic [31:0]          n_stall
);
  localparam int unsigned MW = (1 << REG_W) + 1;   // register mask width (+ HBM bit)
  localparam int unsigned HB = MW - 1;

  typedef struct packed {
    logic            v;
    uop_t            u;
    logic [2:0]      fu;
    logic [MW-1:0]   rm, wm;
  } went_t;

  // ---------------- front end ----------------
  logic             running, d_valid, consume, taken, is_vec;
  logic [IC_AW-1:0] d_pc, fpc;
  logic [63:0]      sreg [SREG_N];
  word_t            mq [NMOD], mqi [NMOD];
  instr_t           ins;
  went_t            dec;
  went_t            win [WIN];
  logic [$clog2(WIN+1)-1:0] wcnt;

  assign ins    = ic_data;
  assign is_vec = !(ins.op inside {OP_SADDI, OP_SBNE, OP_HALT, OP_NOP});
  assign consume = running && d_valid && (!is_vec || wcnt < WIN);
  assign taken   = consume && ins.op == OP_SBNE && sreg[ins.dest[3:0]] != sreg[ins.src0[3:0]];

  always_comb begin
    if (d_valid && !consume) ic_addr = d_pc;
    else if (taken)          ic_addr = d_pc + IC_AW'(ins.imm);
    else                     ic_addr = fpc;
  end

  // decode a vector instruction
  always_comb begin
    dec = '0;
    dec.v = 1'b1;
    dec.u.op = ins.op; dec.u.imm_f = ins.imm_f; dec.u.s1_stream = ins.s1_stream;
    dec.u.d_stream = ins.d_stream;
    dec.u.dest = vreg_t'(ins.dest); dec.u.src0 = vreg_t'(ins.src0); dec.u.src1 = vreg_t'(ins.src1);
    dec.u.imm = word_t'(ins.imm); dec.u.q = mq[ins.mod]; dec.u.qinv = mqi[ins.mod];
    dec.u.in_addr  = (ins.op == OP_LOAD)  ? haddr_t'(sreg[ins.src0[3:0]] + ins.imm) : haddr_t'(sreg[ins.src1[3:0]]);
    dec.u.out_addr = (ins.op == OP_STORE) ? haddr_t'(sreg[ins.dest[3:0]] + ins.imm) : haddr_t'(sreg[ins.dest[3:0]]);
    case (ins.op)
      OP_MMAD:  dec.fu = 3'd0;
      OP_MMUL:  dec.fu = 3'd1;
      OP_AUTO:  dec.fu = 3'd3;
      OP_LOAD, OP_STORE, OP_VCOPY: dec.fu = 3'd4;
      default:  dec.fu = 3'd2;
    endcase
    case (ins.op)
      OP_MMAD, OP_MMUL, OP_MAC: begin
        dec.rm[vreg_t'(ins.src0)] = 1'b1;
        if (!ins.imm_f && !ins.s1_stream) dec.rm[vreg_t'(ins.src1)] = 1'b1;
        if (ins.s1_stream) dec.rm[HB] = 1'b1;
        if (ins.op == OP_MAC) dec.rm[vreg_t'(ins.dest)] = 1'b1;
        if (ins.d_stream) dec.wm[HB] = 1'b1; else dec.wm[vreg_t'(ins.dest)] = 1'b1;
      end
      OP_NTT, OP_INTT: begin
        dec.rm[vreg_t'(ins.src0)] = 1'b1;
        dec.wm[vreg_t'(ins.dest)] = 1'b1; dec.wm[vreg_t'(ins.dest) ^ vreg_t'(1)] = 1'b1;
      end
      OP_AUTO, OP_VCOPY: begin
        dec.rm[vreg_t'(ins.src0)] = 1'b1; dec.wm[vreg_t'(ins.dest)] = 1'b1;
      end
      OP_LOAD:  begin dec.rm[HB] = 1'b1; dec.wm[vreg_t'(ins.dest)] = 1'b1; end
      OP_STORE: begin dec.rm[vreg_t'(ins.src0)] = 1'b1; dec.wm[HB] = 1'b1; end
      default: ;
    endcase
  end

  // ---------------- scoreboard and issue ----------------
  logic [NFU-1:0]  ifl_v;
  logic [MW-1:0]   ifl_r [NFU], ifl_w [NFU];
  logic            iss;
  logic [$clog2(WIN)-1:0] sel;

  function automatic logic clash(logic [MW-1:0] r1, logic [MW-1:0] w1,
                                 logic [MW-1:0] r2, logic [MW-1:0] w2);
    return |((w1 & r2) | (w1 & w2) | (r1 & w2));
  endfunction

  always_comb begin
    iss = 1'b0; sel = '0;
    for (int unsigned i = 0; i < WIN; i++) begin
      logic ok;
      ok = win[i].v && !fu_busy[win[i].fu] && !ifl_v[win[i].fu];
      for (int unsigned j = 0; j < WIN; j++)
        if (j < i && win[j].v && clash(win[j].rm, win[j].wm, win[i].rm, win[i].wm)) ok = 1'b0;
      for (int unsigned f = 0; f < NFU; f++)
        if (ifl_v[f] && clash(ifl_r[f], ifl_w[f], win[i].rm, win[i].wm)) ok = 1'b0;
      if (win[i].u.s1_stream && si_busy) ok = 1'b0;
      if (win[i].u.d_stream && so_busy) ok = 1'b0;
      if ((win[i].rm[HB] || win[i].wm[HB]) && so_busy) ok = 1'b0;
      if (win[i].wm[HB] && si_busy) ok = 1'b0;
      if (ok && !iss) begin iss = 1'b1; sel = $clog2(WIN)'(i); end
    end
  end

  assign uop_o = win[sel].u;
  always_comb begin
    fu_start = '0;
    if (iss) fu_start[win[sel].fu] = 1'b1;
  end
  assign si_start = iss && win[sel].u.s1_stream;
  assign si_addr  = win[sel].u.in_addr;
  assign so_start = iss && win[sel].u.d_stream;
  assign so_addr  = win[sel].u.out_addr;
  assign halted   = !running && !d_valid && wcnt == 0 && ifl_v == '0 && !si_busy && !so_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; d_valid <= 1'b0; d_pc <= '0; fpc <= '0; wcnt <= '0;
      for (int i = 0; i < SREG_N; i++) sreg[i] <= '0;
      for (int i = 0; i < WIN; i++) win[i] <= '0;
      for (int i = 0; i < NMOD; i++) begin mq[i] <= '0; mqi[i] <= '0; end
      ifl_v <= '0;
      for (int i = 0; i < NFU; i++) begin ifl_r[i] <= '0; ifl_w[i] <= '0; end
      n_issued <= '0; n_ooo <= '0; n_stall <= '0;
    end else begin
      if (mt_we) begin mq[mt_idx] <= mt_q; mqi[mt_idx] <= mt_qinv; end
      // fetch
      if (run && !running) begin
        running <= 1'b1; d_valid <= 1'b0; fpc <= '0;
      end else if (running) begin
        if (!d_valid || consume) begin
          d_valid <= 1'b1; d_pc <= ic_addr; fpc <= ic_addr + 1'b1;
        end
        if (consume && ins.op == OP_HALT) begin running <= 1'b0; d_valid <= 1'b0; end
        if (consume && ins.op == OP_SADDI && ins.dest[3:0] != 0)
          sreg[ins.dest[3:0]] <= sreg[ins.src0[3:0]] + ins.imm;
      end
      // scoreboard
      for (int f = 0; f < NFU; f++) if (fu_done[f]) ifl_v[f] <= 1'b0;
      if (iss) begin
        ifl_v[win[sel].fu] <= 1'b1; ifl_r[win[sel].fu] <= win[sel].rm; ifl_w[win[sel].fu] <= win[sel].wm;
        n_issued <= n_issued + 1;
        if (sel != 0) n_ooo <= n_ooo + 1;
      end else if (wcnt != 0) n_stall <= n_stall + 1;
      // window: remove the issued entry, append the decoded one
      begin
        went_t nw [WIN];
        int unsigned nc;
        nw = win; nc = wcnt;
        if (iss) begin
          for (int unsigned i = 0; i < WIN; i++)
            if (i >= sel) nw[i] = (i + 1 < WIN) ? win[i+1] : '0;
          nc = nc - 1;
        end
        if (consume && is_vec) begin nw[nc] = dec; nc = nc + 1; end
        win  <= nw;
        wcnt <= ($clog2(WIN+1))'(nc);
      end
    end
  end
endmodule
