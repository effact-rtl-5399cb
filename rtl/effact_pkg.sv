// effact_pkg: types, constants and lane arithmetic shared by every EFFACT block.
//
// The accelerator works on residue polynomials ("limbs"): N = 2^LOG_N coefficients of
// WORD_W bits, each reduced modulo one RNS prime q. On chip a limb is stored as
// N/LANES rows of LANES words; every function unit consumes and produces whole rows.
//
// Numbers that follow the paper: N = 2^16 and log q = 54 (bootstrapping parameter
// table), 1024 lanes (ASIC configuration), 27 MB of register-file SRAM, which is
// exactly 64 limbs of 2^16 x 54 bits. The instruction encoding, the field widths and
// the number of resident moduli are this design's own choices; the paper lists the
// instructions (MMUL, MMAD, (i)NTT, AUTO, LoadRes, StoreRes, VecCopy, scalar subset)
// but not their bit layout.
//
// Arithmetic: data stay in Montgomery form x*R mod q with R = 2^WORD_W (the paper
// keeps data in "single-Montgomery" form). mont_mul(a, b) = a*b*R^-1 mod q, so the
// product of two Montgomery-form values is again in Montgomery form. qinv is
// -q^-1 mod 2^WORD_W, supplied with every modulus.
package effact_pkg;

  localparam int unsigned WORD_W   = 54;   // log(q), bootstrapping parameter table
  localparam int unsigned REG_W    = 6;    // 64 limb registers
  localparam int unsigned MOD_W    = 5;    // 32 resident moduli (L + k = 24 + 6 = 30 used)
  localparam int unsigned HADDR_W  = 32;   // HBM row address
  localparam int unsigned SREG_N   = 16;   // scalar registers, r0 reads as zero

  typedef logic [WORD_W-1:0] word_t;
  typedef logic [REG_W-1:0]  vreg_t;
  typedef logic [HADDR_W-1:0] haddr_t;

  typedef enum logic [3:0] {
    OP_NOP   = 4'd0,
    OP_MMUL  = 4'd1,   // dest = src0 * (src1 | imm)            (MMULU)
    OP_MMAD  = 4'd2,   // dest = src0 + (src1 | imm)            (MADDU)
    OP_NTT   = 4'd3,   // dest = NTT(src0), dest^1 is scratch   (NTTU)
    OP_INTT  = 4'd4,   // dest = iNTT(src0) without the 1/N     (NTTU)
    OP_MAC   = 4'd5,   // dest = dest + src0 * (src1 | imm)     (NTTU in MAC mode)
    OP_AUTO  = 4'd6,   // dest = sigma_k(src0), k = imm         (AUTOU)
    OP_LOAD  = 4'd7,   // LoadRes  dest <- HBM[s(src0) + imm]
    OP_STORE = 4'd8,   // StoreRes HBM[s(dest) + imm] <- src0
    OP_VCOPY = 4'd9,   // VecCopy  dest <- src0
    OP_SADDI = 4'd10,  // scalar: s(dest) = s(src0) + imm
    OP_SBNE  = 4'd11,  // scalar: if s(dest) != s(src0) pc += imm
    OP_HALT  = 4'd15
  } opcode_e;

  // Instruction word as held in the instruction cache.
  typedef struct packed {
    opcode_e           op;
    logic              imm_f;      // second operand is the immediate
    logic              s1_stream;  // second operand streams from HBM row s(src1)
    logic              d_stream;   // result streams to HBM row s(dest)
    logic [MOD_W-1:0]  mod;
    logic [7:0]        dest;
    logic [7:0]        src0;
    logic [7:0]        src1;
    logic [63:0]       imm;
  } instr_t;

  // Decoded micro-op handed from the core to a function unit.
  typedef struct packed {
    opcode_e           op;
    logic              imm_f;
    logic              s1_stream;
    logic              d_stream;
    vreg_t             dest;
    vreg_t             src0;
    vreg_t             src1;
    word_t             imm;
    word_t             q;
    word_t             qinv;
    haddr_t            in_addr;    // LOAD source row / streamed operand row
    haddr_t            out_addr;   // STORE destination row / streamed result row
  } uop_t;

  function automatic word_t mod_add(word_t a, word_t b, word_t q);
    logic [WORD_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= {1'b0, q}) s = s - {1'b0, q};
    return s[WORD_W-1:0];
  endfunction

  function automatic word_t mod_sub(word_t a, word_t b, word_t q);
    logic [WORD_W:0] d;
    d = {1'b0, a} - {1'b0, b};
    if (a < b) d = d + {1'b0, q};
    return d[WORD_W-1:0];
  endfunction

  // Montgomery multiplication, R = 2^WORD_W, inputs < q, result < q.
  function automatic word_t mont_mul(word_t a, word_t b, word_t q, word_t qinv);
    logic [2*WORD_W-1:0] t;
    logic [WORD_W-1:0]   m;
    logic [2*WORD_W:0]   u;
    logic [WORD_W:0]     r;
    t = a * b;
    m = t[WORD_W-1:0] * qinv;
    u = {1'b0, t} + {{(WORD_W+1){1'b0}}, m} * {{(WORD_W+1){1'b0}}, q};
    r = u[2*WORD_W:WORD_W];
    if (r >= {1'b0, q}) r = r - {1'b0, q};
    return r[WORD_W-1:0];
  endfunction

  // Bit reversal of the low nb bits of x.
  function automatic logic [31:0] bitrev(logic [31:0] x, int unsigned nb);
    logic [31:0] y;
    y = '0;
    for (int unsigned i = 0; i < 32; i++)
      if (i < nb) y[nb-1-i] = x[i];
    return y;
  endfunction

endpackage
