// dsp_pack: two INT4 x INT4 products from one multiplier (DSP packing).
// The MMU pairs two output lanes that share the same activation A: the two weights a and b are
// packed into one wide operand as (a << 8) + b and multiplied by A once, so the low field holds
// A*b and the high field holds A*a. Because A*b is signed, the high field is recovered by
// subtracting the sign-extended low field before shifting. Packing two products per DSP is the
// technique the MMU uses (d_in x d_out MACs in d_in x d_out / 2 DSPs); the 8-bit field spacing is
// this design's choice. Purely combinational.
module dsp_pack
  import lm_pkg::*;
(
  input  int4_t act,
  input  int4_t w_hi,
  input  int4_t w_lo,
  output int8_t p_hi,
  output int8_t p_lo
);
  logic signed [12:0] packed_w;
  logic signed [17:0] prod;
  logic signed [17:0] hi_part;

  always_comb begin
    packed_w = (13'(w_hi) <<< 8) + 13'(w_lo);
    prod     = 18'(packed_w) * 18'(act);
    p_lo     = int8_t'(prod[7:0]);
    hi_part  = prod - 18'(p_lo);
    p_hi     = int8_t'(hi_part >>> 8);
  end
endmodule
