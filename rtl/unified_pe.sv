// unified_pe: one butterfly processing element of the unified BP/SC array.
//
// A butterfly of stage j joins rows i (upper) and i+s (lower) between node
// column j (u side, left) and column j+1 (x side, right). With the min-sum
// function g(x,y) = s sign(x) sign(y) min(|x|,|y|) the four BP messages are
//   l_out_up = g(l_in_up, l_in_lo + r_in_lo)        Type-I
//   l_out_lo = g(r_in_up, l_in_up) + l_in_lo        Type-II
//   r_out_up = g(r_in_up, l_in_lo + r_in_lo)        Type-I
//   r_out_lo = g(r_in_up, l_in_up) + r_in_lo        Type-II
// where l_in_* are the L messages arriving from column j+1 and r_in_* the R
// messages arriving from column j. In SC mode the two L-side blocks compute
// f(l_in_up, l_in_lo) and g(l_in_up, l_in_lo, ps_up) instead, which is why the
// same PE array also runs the SC decoder. The R-side blocks are always in BP
// mode (their outputs are not used during SC). The assignment of the operands
// to the message ports is the standard BP butterfly; it is this design's
// reading, the architecture gives only the two block equations.
// Purely combinational; the caller owns the message registers.
module unified_pe
  import polar_pkg::*;
(
  input  pe_mode_e mode,
  input  llr_t     l_in_up,
  input  llr_t     l_in_lo,
  input  llr_t     r_in_up,
  input  llr_t     r_in_lo,
  input  logic     ps_up,     // SC partial sum of the upper row
  output llr_t     l_out_up,
  output llr_t     l_out_lo,
  output llr_t     r_out_up,
  output llr_t     r_out_lo
);
  unified_type1 u_l1 (
    .mode(mode), .a(l_in_up), .b(l_in_lo),
    .in1_bp(l_in_up), .in2_bp(l_in_lo), .in3_bp(r_in_lo), .d(l_out_up));

  unified_type2 u_l2 (
    .mode(mode), .a(l_in_up), .b(l_in_lo), .u_sum(ps_up),
    .in1_bp(l_in_lo), .in2_bp(r_in_up), .in3_bp(l_in_up), .d(l_out_lo));

  unified_type1 u_r1 (
    .mode(MODE_BP), .a(LLR_ZERO), .b(LLR_ZERO),
    .in1_bp(r_in_up), .in2_bp(l_in_lo), .in3_bp(r_in_lo), .d(r_out_up));

  unified_type2 u_r2 (
    .mode(MODE_BP), .a(LLR_ZERO), .b(LLR_ZERO), .u_sum(1'b0),
    .in1_bp(r_in_lo), .in2_bp(r_in_up), .in3_bp(l_in_up), .d(r_out_lo));
endmodule
