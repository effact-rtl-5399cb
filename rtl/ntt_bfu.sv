// ntt_bfu: one reconfigurable butterfly of the NTT unit (combinational).
//
// It holds one Montgomery multiplier, one modular adder and one modular subtractor;
// multiplexers move the multiplier and mask the subtractor to give three data paths:
//   MODE_CT  (NTT butterfly, Cooley-Tukey):   t = bot*w;  o0 = top + t;  o1 = top - t
//   MODE_GS  (iNTT butterfly, Gentleman-Sande): o0 = top + bot;  o1 = (top - bot)*w
//   MODE_MAC (multiply-accumulate):            o0 = top + bot*w;  o1 = 0
// These are the three butterfly types the paper draws for its NTT unit (multiplier
// before the adder/subtractor for NTT, after the subtractor for iNTT, subtractor masked
// for MAC). Products are Montgomery products (see effact_pkg).
module ntt_bfu
  import effact_pkg::*;
(
  input  logic [1:0] mode,
  input  word_t      top,
  input  word_t      bot,
  input  word_t      w,
  input  word_t      q,
  input  word_t      qinv,
  output word_t      o0,
  output word_t      o1
);
  localparam logic [1:0] MODE_CT = 2'd0, MODE_GS = 2'd1, MODE_MAC = 2'd2;

  word_t diff, mul_in, prod, add_b, sub_b;

  always_comb begin
    diff   = mod_sub(top, bot, q);
    mul_in = (mode == MODE_GS) ? diff : bot;
    prod   = mont_mul(mul_in, w, q, qinv);
    sub_b  = prod;
    add_b  = (mode == MODE_GS) ? bot : prod;
    o0     = mod_add(top, add_b, q);
    case (mode)
      MODE_CT: o1 = mod_sub(top, sub_b, q);
      MODE_GS: o1 = prod;
      default: o1 = '0;
    endcase
  end
endmodule
