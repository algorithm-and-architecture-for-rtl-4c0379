// unified_type1: the unified Type-I computation block.
//
// One block computes either the SC f-function
//     f(a,b) = sign(a) sign(b) min(|a|,|b|)                    (mode = MODE_SC)
// or the BP check-node style update
//     d = s sign(in1) sign(in2+in3) min(|in1|, |in2+in3|)      (mode = MODE_BP)
// The SC case is the BP case with in1 = a, in2 = b, in3 = 0 and s = 1, so the
// same hardware serves both: three input muxes (select 0 = SC operands a, b, 0;
// select 1 = BP operands), in2 and in3 converted to two's complement (S2C) and
// added, the sum converted back (C2S), the sign of in1 XORed with the sign of
// the sum, the smaller magnitude picked (Comp & Select), then an output mux that
// takes the scaled magnitude in BP mode and the unscaled one in SC mode.
// This structure follows the published Type-I block; the single 'mode' select
// shared by all muxes, the word length and the scaling factor are this design's.
// Purely combinational; the adder sum saturates in C2S.
module unified_type1
  import polar_pkg::*;
(
  input  pe_mode_e mode,
  input  llr_t     a,        // SC operands
  input  llr_t     b,
  input  llr_t     in1_bp,   // BP operands
  input  llr_t     in2_bp,
  input  llr_t     in3_bp,
  output llr_t     d
);
  llr_t in1, in2, in3, sum_sm;
  tc_t  in2_tc, in3_tc, sum_tc;
  logic [MAGW-1:0] mn, mn_scaled;

  assign in1 = (mode == MODE_BP) ? in1_bp : a;
  assign in2 = (mode == MODE_BP) ? in2_bp : b;
  assign in3 = (mode == MODE_BP) ? in3_bp : LLR_ZERO;

  s2c u_s2c2 (.x(in2), .y(in2_tc));
  s2c u_s2c3 (.x(in3), .y(in3_tc));
  assign sum_tc = in2_tc + in3_tc;
  c2s u_c2s (.y(sum_tc), .x(sum_sm));

  comp_select u_cs (.a(in1.mag), .b(sum_sm.mag), .min_o(mn));
  scale_unit  u_sc (.mag_i(mn), .mag_o(mn_scaled));

  assign d.sgn = in1.sgn ^ sum_sm.sgn;
  assign d.mag = (mode == MODE_BP) ? mn_scaled : mn;
endmodule
