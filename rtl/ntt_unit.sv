// ntt_unit (NTTU): fine-grained, constant-geometry NTT/iNTT unit whose butterflies
// double as multiply-accumulate lanes.
//
// Structure. LANES reconfigurable butterflies (ntt_bfu) are shared by all log2(N)
// stages of a transform ("fine-grained" NTT: one set of multipliers and adders for
// every stage instead of one per stage). The data flow is constant geometry (CG-NTT):
// every forward stage pairs positions j and j + N/2 and writes the results to 2j and
// 2j+1, so each cycle reads register-file rows c and c + ROWS/2 and writes rows 2c and
// 2c+1, the same pattern in every stage. The inverse runs the mirror image (reads
// 2c, 2c+1, writes c, c + ROWS/2) with Gentleman-Sande butterflies. A transform
// ping-pongs between the destination register and its partner register dest^1, so
// an NTT destination occupies two limb registers; log2(N) is even so the last stage
// lands in dest.
//
// Ordering and twiddles. The forward transform takes natural order and leaves the
// result in bit-reversed order; the inverse takes bit-reversed order and returns
// natural order, so no coefficient is ever bit-reverse permuted: the bit reversal is
// folded into the twiddle table, which holds psi^bitrev(i) (forward, rows 0..ROWS-1)
// and psi^-bitrev(i) (inverse, rows ROWS..2*ROWS-1) in Montgomery form, psi a primitive
// 2N-th root of unity (negacyclic transform). For stage exponent u (u = s forward,
// u = log2(N)-1-s inverse) butterfly j uses entry 2^u + (j mod 2^u). The final 1/N
// scaling of the iNTT is not done here: it is folded into the first base-conversion
// constant, as in the paper.
//
// MAC mode (OP_MAC): dest = dest + src0 * (src1 | imm), one row per cycle, using the
// multiplier and adder of each butterfly with the subtractor masked.
//
// Interface: three register-file read ports (1-cycle latency), two write ports, and a
// write port for the twiddle memory. Timing: a forward or inverse transform takes
// log2(N) * (ROWS/2 + 3) cycles (each stage drains its 2-cycle pipeline before the
// next reads its results); MAC takes ROWS + 3. The paper gives the CG algorithm, the
// shared butterflies, the three butterfly types and the bit-reversed twiddles; the
// ping-pong register pair, the stored (not generated) twiddle table and the pipeline
// are this design's choices. The paper generates twiddles on the fly from seeds.
module ntt_unit
  import effact_pkg::*;
#(
  parameter int unsigned LANES     = 1024,
  parameter int unsigned LOG_N     = 16,
  parameter int unsigned LOG_LANES = $clog2(LANES),
  parameter int unsigned ROW_W     = LOG_N - LOG_LANES,
  parameter int unsigned RA_W      = REG_W + ROW_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  uop_t                          uop,
  output logic                          busy,
  output logic                          done,
  output logic [RA_W-1:0]               ra_addr,
  input  logic [LANES-1:0][WORD_W-1:0]  ra_data,
  output logic [RA_W-1:0]               rb_addr,
  input  logic [LANES-1:0][WORD_W-1:0]  rb_data,
  output logic [RA_W-1:0]               rc_addr,
  input  logic [LANES-1:0][WORD_W-1:0]  rc_data,
  output logic                          wa_en,
  output logic [RA_W-1:0]               wa_addr,
  output logic [LANES-1:0][WORD_W-1:0]  wa_data,
  output logic                          wb_en,
  output logic [RA_W-1:0]               wb_addr,
  output logic [LANES-1:0][WORD_W-1:0]  wb_data,
  input  logic                          tf_we,
  input  logic [ROW_W:0]                tf_addr,
  input  logic [LANES-1:0][WORD_W-1:0]  tf_wdata
);
  localparam int unsigned ROWS  = 1 << ROW_W;
  localparam int unsigned HALF  = ROWS / 2;
  localparam logic [1:0] MODE_CT = 2'd0, MODE_GS = 2'd1, MODE_MAC = 2'd2;

  // twiddle memory: 2*ROWS rows of LANES words
  logic [LANES-1:0][WORD_W-1:0] tf_mem [2*ROWS];
  logic [LANES-1:0][WORD_W-1:0] tf_row;
  logic [ROW_W:0]               tf_raddr;

  uop_t              cur;
  logic [1:0]        mode;
  logic [4:0]        stage;
  logic [ROW_W:0]    cnt;          // chunk (transform) or row (MAC) counter
  logic              v1, v2, go, last_chunk;
  logic [ROW_W-1:0]  cnt1, cnt2;
  logic [4:0]        u1;           // stage exponent of the data in stage 1
  vreg_t             wdst1, wdst2;
  logic [LANES-1:0][WORD_W-1:0] o0, o1, tw, top, bot;
  logic [LANES-1:0][WORD_W-1:0] r0, r1;
  logic [4:0]        u;
  vreg_t             rsrc, wdst;

  // stage exponent, stage source and destination registers
  always_comb begin
    u    = (mode == MODE_GS) ? 5'(LOG_N - 1 - stage) : stage;
    wdst = (((LOG_N - 1 - stage) % 2) == 0) ? cur.dest : (cur.dest ^ vreg_t'(1));
    rsrc = (stage == 0) ? cur.src0 :
           ((((LOG_N - stage) % 2) == 0) ? cur.dest : (cur.dest ^ vreg_t'(1)));
    if (mode == MODE_MAC) wdst = cur.dest;
  end

  assign last_chunk = (mode == MODE_MAC) ? (cnt == ROWS) : (cnt == HALF);
  assign go = busy && !last_chunk;

  always_comb begin
    ra_addr = '0; rb_addr = '0; rc_addr = '0;
    case (mode)
      MODE_CT: begin
        ra_addr = {rsrc, ROW_W'(cnt)};
        rb_addr = {rsrc, ROW_W'(cnt + HALF)};
      end
      MODE_GS: begin
        ra_addr = {rsrc, ROW_W'(2 * cnt)};
        rb_addr = {rsrc, ROW_W'(2 * cnt + 1)};
      end
      default: begin
        ra_addr = {cur.dest, ROW_W'(cnt)};
        rb_addr = {cur.src0, ROW_W'(cnt)};
        rc_addr = {cur.src1, ROW_W'(cnt)};
      end
    endcase
    // twiddle row for stage exponent u and chunk cnt
    if (u >= LOG_LANES)
      tf_raddr = ((mode == MODE_GS) ? (ROW_W+1)'(ROWS) : '0) +
                 (ROW_W+1)'((1 << (u - LOG_LANES)) + (cnt & ((1 << (u - LOG_LANES)) - 1)));
    else
      tf_raddr = (mode == MODE_GS) ? (ROW_W+1)'(ROWS) : '0;
  end

  always_ff @(posedge clk) begin
    if (tf_we) tf_mem[tf_addr] <= tf_wdata;
    tf_row <= tf_mem[tf_raddr];
  end

  // butterfly operands
  always_comb begin
    for (int unsigned k = 0; k < LANES; k++) begin
      int unsigned m;
      m = (u1 >= LOG_LANES) ? k : ((1 << u1) + (k & ((1 << u1) - 1)));
      case (mode)
        MODE_CT: begin top[k] = ra_data[k]; bot[k] = rb_data[k]; tw[k] = tf_row[m]; end
        MODE_GS: begin
          // pair k is positions 2k, 2k+1 of the two rows read together
          top[k] = (2*k < LANES) ? ra_data[2*k]   : rb_data[2*k - LANES];
          bot[k] = (2*k < LANES) ? ra_data[2*k+1] : rb_data[2*k + 1 - LANES];
          tw[k]  = tf_row[m];
        end
        default: begin
          top[k] = ra_data[k]; bot[k] = rb_data[k];
          tw[k]  = cur.imm_f ? cur.imm : rc_data[k];
        end
      endcase
    end
  end

  for (genvar k = 0; k < LANES; k++) begin : g_bfu
    ntt_bfu u_bfu (.mode(mode), .top(top[k]), .bot(bot[k]), .w(tw[k]), .q(cur.q),
                   .qinv(cur.qinv), .o0(o0[k]), .o1(o1[k]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; cur <= '0; mode <= MODE_CT; stage <= '0; cnt <= '0;
      v1 <= 1'b0; v2 <= 1'b0; cnt1 <= '0; cnt2 <= '0; u1 <= '0; wdst1 <= '0; wdst2 <= '0;
      r0 <= '0; r1 <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        cur <= uop; busy <= 1'b1; stage <= '0; cnt <= '0;
        mode <= (uop.op == OP_INTT) ? MODE_GS : (uop.op == OP_MAC) ? MODE_MAC : MODE_CT;
      end
      v1 <= go;
      if (go) begin
        cnt1 <= ROW_W'(cnt); u1 <= u; wdst1 <= wdst; cnt <= cnt + 1'b1;
      end
      v2 <= v1;
      if (v1) begin
        cnt2 <= cnt1; wdst2 <= wdst1;
        if (mode == MODE_CT) begin
          // outputs of pairs k go to positions 2k (o0) and 2k+1 (o1) of rows 2c, 2c+1
          for (int unsigned p = 0; p < 2*LANES; p++) begin
            if (p < LANES) r0[p]         <= (p % 2 == 0) ? o0[p/2] : o1[p/2];
            else           r1[p - LANES] <= (p % 2 == 0) ? o0[p/2] : o1[p/2];
          end
        end else begin
          r0 <= o0; r1 <= o1;
        end
      end
      if (busy && last_chunk && !v1 && !v2) begin
        if (mode != MODE_MAC && stage != 5'(LOG_N - 1)) begin
          stage <= stage + 1'b1; cnt <= '0;
        end else begin
          busy <= 1'b0; done <= 1'b1;
        end
      end
    end
  end

  always_comb begin
    wa_en = v2; wa_data = r0; wb_data = r1; wb_en = v2 && (mode != MODE_MAC);
    case (mode)
      MODE_CT: begin wa_addr = {wdst2, ROW_W'(2*cnt2)}; wb_addr = {wdst2, ROW_W'(2*cnt2 + 1)}; end
      MODE_GS: begin wa_addr = {wdst2, cnt2}; wb_addr = {wdst2, ROW_W'(cnt2 + HALF)}; end
      default: begin wa_addr = {wdst2, cnt2}; wb_addr = '0; end
    endcase
  end
endmodule
